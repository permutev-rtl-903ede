// pv_decoder: RV32IM instruction decoder extended with the PermuteV fields.
// A PermuteV instruction keeps the opcode and funct3/funct7 of its RV32IM
// counterpart and uses bits that are always zero there (paper, encoding
// figure):
//   R-type (add..and, sll/srl/sra, slt(u), mul*, div(u), rem(u)):
//       Ln = inst[29:28], x = inst[27:26]; inst[31] stays 0,
//       inst[30] (sub/sra) and inst[25] (RV32M) keep their meaning.
//   I-type shifts (slli, srli, srai):
//       Ln = inst[29:28], x = inst[27:26]; inst[30] still selects srai.
//   B-type (pv.beq, pv.bne): inst[13] = 1 (funct3 010 / 011),
//       Ln = inst[23:22], x = inst[21:20], inst[24] = 0; no rs2.
// Ln = 0 means an ordinary RV32IM instruction; Ln = 1..3 names L1..L3.
// pv.init/pv.initi have no encoding in the paper. This design puts them on
// the custom-0 opcode: funct3 000 = pv.init (N = Reg[rs2], inst[24:20]),
// funct3 001 = pv.initi (N = zero-extended inst[31:20]); Ln = inst[8:7]
// (the low bits of the unused rd field). Misc-mem (fence) decodes as a
// no-op; system instructions and every other pattern are illegal.
// Combinational.
module pv_decoder
  import pv_pkg::*;
(
  input  logic [31:0] instr_i,
  output dec_t        dec_o
);
  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;
  logic [1:0] ln_r, x_r;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign ln_r   = instr_i[29:28];
  assign x_r    = instr_i[27:26];
  // funct7 with the pv fields removed.
  assign funct7 = {instr_i[31], instr_i[30], 4'b0000, instr_i[25]};

  always_comb begin
    dec_o         = '0;
    dec_o.rd      = instr_i[11:7];
    dec_o.rs1     = instr_i[19:15];
    dec_o.rs2     = instr_i[24:20];
    dec_o.opa_sel = OPA_RS1;
    dec_o.alu_op  = ALU_ADD;
    dec_o.br_op   = BR_EQ;
    dec_o.md_op   = MD_MUL;
    dec_o.ls_size = LS_WORD;

    unique case (opcode)
      OPC_LUI: begin
        dec_o.rf_we   = 1'b1;
        dec_o.imm     = {instr_i[31:12], 12'b0};
        dec_o.opa_sel = OPA_ZERO;
        dec_o.opb_imm = 1'b1;
      end
      OPC_AUIPC: begin
        dec_o.rf_we   = 1'b1;
        dec_o.imm     = {instr_i[31:12], 12'b0};
        dec_o.opa_sel = OPA_PC;
        dec_o.opb_imm = 1'b1;
      end
      OPC_JAL: begin
        dec_o.rf_we  = 1'b1;
        dec_o.is_jal = 1'b1;
        dec_o.imm    = {{12{instr_i[31]}}, instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};
      end
      OPC_JALR: begin
        dec_o.rf_we   = 1'b1;
        dec_o.is_jalr = 1'b1;
        dec_o.imm     = {{20{instr_i[31]}}, instr_i[31:20]};
        dec_o.illegal = (funct3 != 3'b000);
      end
      OPC_BRANCH: begin
        dec_o.is_branch = 1'b1;
        dec_o.imm       = {{20{instr_i[31]}}, instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
        if (funct3[2:1] == 2'b01) begin
          // pv.beq (010) / pv.bne (011)
          dec_o.pv_branch = 1'b1;
          dec_o.pv_ln     = instr_i[23:22];
          dec_o.pv_x      = instr_i[21:20];
          dec_o.rs2       = 5'd0;
          dec_o.br_op     = funct3[0] ? BR_NE : BR_EQ;
          dec_o.illegal   = (instr_i[23:22] == 2'b00) || instr_i[24] || (instr_i[21:20] == 2'b11);
        end else begin
          unique case (funct3)
            3'b000:  dec_o.br_op = BR_EQ;
            3'b001:  dec_o.br_op = BR_NE;
            3'b100:  dec_o.br_op = BR_LT;
            3'b101:  dec_o.br_op = BR_GE;
            3'b110:  dec_o.br_op = BR_LTU;
            default: dec_o.br_op = BR_GEU;
          endcase
        end
      end
      OPC_LOAD: begin
        dec_o.rf_we       = 1'b1;
        dec_o.is_load     = 1'b1;
        dec_o.imm         = {{20{instr_i[31]}}, instr_i[31:20]};
        dec_o.opb_imm     = 1'b1;
        dec_o.ls_unsigned = funct3[2];
        dec_o.ls_size     = ls_size_e'(funct3[1:0]);
        dec_o.illegal     = (funct3 == 3'b011) || (funct3 == 3'b110) || (funct3 == 3'b111);
      end
      OPC_STORE: begin
        dec_o.is_store = 1'b1;
        dec_o.imm      = {{20{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
        dec_o.opb_imm  = 1'b1;
        dec_o.ls_size  = ls_size_e'(funct3[1:0]);
        dec_o.illegal  = funct3[2] || (funct3[1:0] == 2'b11);
      end
      OPC_OPIMM: begin
        dec_o.rf_we   = 1'b1;
        dec_o.imm     = {{20{instr_i[31]}}, instr_i[31:20]};
        dec_o.opb_imm = 1'b1;
        unique case (funct3)
          3'b000: dec_o.alu_op = ALU_ADD;
          3'b010: dec_o.alu_op = ALU_SLT;
          3'b011: dec_o.alu_op = ALU_SLTU;
          3'b100: dec_o.alu_op = ALU_XOR;
          3'b110: dec_o.alu_op = ALU_OR;
          3'b111: dec_o.alu_op = ALU_AND;
          3'b001, 3'b101: begin
            // slli / srli / srai and their pv counterparts
            dec_o.imm     = {27'b0, instr_i[24:20]};
            dec_o.alu_op  = (funct3 == 3'b001) ? ALU_SLL : (instr_i[30] ? ALU_SRA : ALU_SRL);
            dec_o.pv_ln   = ln_r;
            dec_o.pv_x    = x_r;
            dec_o.illegal = instr_i[31] || instr_i[25] || (funct3 == 3'b001 && instr_i[30]) ||
                            (ln_r == 2'b00 && x_r != 2'b00) || (x_r == 2'b11);
          end
          default: dec_o.illegal = 1'b1;
        endcase
      end
      OPC_OP: begin
        dec_o.rf_we   = 1'b1;
        dec_o.pv_ln   = ln_r;
        dec_o.pv_x    = x_r;
        dec_o.illegal = (ln_r == 2'b00 && x_r != 2'b00) || (x_r == 2'b11);
        unique case ({funct7, funct3})
          {7'b0000000, 3'b000}: dec_o.alu_op = ALU_ADD;
          {7'b0100000, 3'b000}: dec_o.alu_op = ALU_SUB;
          {7'b0000000, 3'b001}: dec_o.alu_op = ALU_SLL;
          {7'b0000000, 3'b010}: dec_o.alu_op = ALU_SLT;
          {7'b0000000, 3'b011}: dec_o.alu_op = ALU_SLTU;
          {7'b0000000, 3'b100}: dec_o.alu_op = ALU_XOR;
          {7'b0000000, 3'b101}: dec_o.alu_op = ALU_SRL;
          {7'b0100000, 3'b101}: dec_o.alu_op = ALU_SRA;
          {7'b0000000, 3'b110}: dec_o.alu_op = ALU_OR;
          {7'b0000000, 3'b111}: dec_o.alu_op = ALU_AND;
          {7'b0000001, 3'b000}, {7'b0000001, 3'b001}, {7'b0000001, 3'b010},
          {7'b0000001, 3'b011}, {7'b0000001, 3'b100}, {7'b0000001, 3'b101},
          {7'b0000001, 3'b110}, {7'b0000001, 3'b111}: begin
            dec_o.is_md = 1'b1;
            dec_o.md_op = md_op_e'(funct3);
          end
          default: dec_o.illegal = 1'b1;
        endcase
      end
      OPC_CUST0: begin
        dec_o.pv_init     = 1'b1;
        dec_o.pv_ln       = instr_i[8:7];
        dec_o.pv_init_imm = funct3[0];
        dec_o.imm         = {20'b0, instr_i[31:20]};
        dec_o.illegal     = (funct3[2:1] != 2'b00) || (instr_i[8:7] == 2'b00);
      end
      OPC_MISC: ;  // fence / fence.i: nothing to order in this core
      default: dec_o.illegal = 1'b1;
    endcase
    if (dec_o.illegal) begin
      dec_o.rf_we     = 1'b0;
      dec_o.is_load   = 1'b0;
      dec_o.is_store  = 1'b0;
      dec_o.is_branch = 1'b0;
      dec_o.is_jal    = 1'b0;
      dec_o.is_jalr   = 1'b0;
      dec_o.is_md     = 1'b0;
      dec_o.pv_init   = 1'b0;
      dec_o.pv_branch = 1'b0;
    end
  end
endmodule
