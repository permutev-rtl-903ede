// pv_pkg: types and constants shared by the PermuteV core.
// Holds the RV32 opcodes, the ALU and multiply/divide operation codes, the
// decoded-instruction struct passed from the decoder to the controller, and
// the custom opcode chosen for pv.init/pv.initi. The pv field positions
// (Ln = inst[29:28], x = inst[27:26] for R/I-type; Ln = inst[23:22],
// x = inst[21:20] for B-type) follow the paper's encoding figure. The opcode
// of pv.init(i) is not given by the paper; this design uses custom-0.
package pv_pkg;

  typedef enum logic [6:0] {
    OPC_LOAD   = 7'b0000011,
    OPC_CUST0  = 7'b0001011,   // pv.init / pv.initi (design choice)
    OPC_MISC   = 7'b0001111,
    OPC_OPIMM  = 7'b0010011,
    OPC_AUIPC  = 7'b0010111,
    OPC_STORE  = 7'b0100011,
    OPC_OP     = 7'b0110011,
    OPC_LUI    = 7'b0110111,
    OPC_BRANCH = 7'b1100011,
    OPC_JALR   = 7'b1100111,
    OPC_JAL    = 7'b1101111,
    OPC_SYSTEM = 7'b1110011
  } opcode_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {
    BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU
  } br_op_e;

  typedef enum logic [2:0] {
    MD_MUL, MD_MULH, MD_MULHSU, MD_MULHU, MD_DIV, MD_DIVU, MD_REM, MD_REMU
  } md_op_e;

  typedef enum logic [1:0] {
    OPA_RS1, OPA_PC, OPA_ZERO
  } opa_sel_e;

  typedef enum logic [1:0] {
    LS_BYTE, LS_HALF, LS_WORD
  } ls_size_e;

  // Decoded instruction, produced by pv_decoder.
  typedef struct packed {
    logic          illegal;
    logic          rf_we;        // writes rd
    logic [4:0]    rd;
    logic [4:0]    rs1;
    logic [4:0]    rs2;
    logic [31:0]   imm;
    opa_sel_e      opa_sel;
    logic          opb_imm;      // ALU operand B is imm (else rs2)
    alu_op_e       alu_op;
    logic          is_md;        // RV32M instruction
    md_op_e        md_op;
    logic          is_load;
    logic          is_store;
    ls_size_e      ls_size;
    logic          ls_unsigned;
    logic          is_branch;
    br_op_e        br_op;
    logic          is_jal;
    logic          is_jalr;
    // PermuteV fields
    logic [1:0]    pv_ln;        // 0: not a pv instruction, 1..3: LIG L1..L3
    logic [1:0]    pv_x;         // left shift applied to the LIG value
    logic          pv_branch;    // pv.beq/pv.bne: compare rs1 with Ln.i<<x
    logic          pv_init;      // pv.init / pv.initi
    logic          pv_init_imm;  // pv.initi: N comes from imm, else from rs2
  } dec_t;

endpackage
