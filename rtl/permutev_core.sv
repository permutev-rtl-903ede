// permutev_core: RV32IM core with the PermuteV loop-permutation extension.
// Two pipeline stages as in the Ibex core the paper builds on: IF (fetch and
// IF/ID register) and ID/EX (decode, register read, ALU / MULT-DIV / LSU,
// writeback). PermuteV adds NUM_LIG Loop Index Generators fed by one PRNG,
// an adder and two multiplexers after the register file (pv_operand), and
// decoding of the Ln/x fields that mark a pv instruction. Software calls
// pv.init(i) with the loop's trip count N, uses pv.add/pv.mul/... to fold the
// permuted index Ln.pi (shifted by x) into an address or value, and closes
// the loop with pv.bne, which compares against the iteration count and steps
// the LIG. The loop body thus visits iterations in a random order, a random
// permutation inside each window of B consecutive iterations, starting at a
// random offset.
// Bus interfaces follow Ibex (req/gnt/rvalid for instruction and data).
// Ibex's compressed decoder, CSRs, interrupts and debug mode are not part of
// this design: debug_req_i is accepted and unused, 32-bit instructions only.
// Parameters: NUM_LIG (1..3, paper), B (block size, power of two, paper's
// recommended 4), NW (width of N and the indices, this design's choice).
module permutev_core
  import pv_pkg::*;
#(
  parameter int unsigned NUM_LIG = 3,
  parameter int unsigned B       = 4,
  parameter int unsigned NW      = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  // instruction memory
  output logic        instr_req_o,
  input  logic        instr_gnt_i,
  input  logic        instr_rvalid_i,
  output logic [31:0] instr_addr_o,
  input  logic [31:0] instr_rdata_i,
  // data memory
  output logic        data_req_o,
  input  logic        data_gnt_i,
  input  logic        data_rvalid_i,
  output logic        data_we_o,
  output logic [3:0]  data_be_o,
  output logic [31:0] data_addr_o,
  output logic [31:0] data_wdata_o,
  input  logic [31:0] data_rdata_i,
  // debug request of the Ibex core (debug mode not implemented)
  input  logic        debug_req_i,
  output logic        illegal_insn_o
);
  // ---------------- IF stage
  logic        id_valid, id_ready, redirect;
  logic [31:0] id_instr, id_pc, redirect_pc;

  pv_if_stage u_if (
    .clk_i, .rst_ni, .boot_addr_i,
    .instr_req_o, .instr_addr_o, .instr_gnt_i, .instr_rvalid_i, .instr_rdata_i,
    .id_valid_o   (id_valid),
    .id_instr_o   (id_instr),
    .id_pc_o      (id_pc),
    .id_ready_i   (id_ready),
    .redirect_i   (redirect),
    .redirect_pc_i(redirect_pc)
  );

  // ---------------- ID stage
  dec_t        dec;
  logic [31:0] rs1_val, rs2_val, opa_pv, opb_pv, alu_a, alu_b, alu_res;
  logic [31:0] md_res, lsu_rdata, wb_data, pc_plus4, br_target;
  logic        br_taken, md_valid, lsu_done, lsu_en, md_en, rf_we, jalr_sel;
  logic [1:0]  wb_sel;
  logic [NUM_LIG-1:0]          lig_init, lig_adv, lig_active;
  logic [NUM_LIG-1:0][NW-1:0]  lig_pi, lig_i, lig_inext, lig_n;
  logic [31:0] rnd;
  logic [NW-1:0] init_n;

  pv_decoder u_dec (.instr_i(id_instr), .dec_o(dec));

  pv_regfile u_rf (
    .clk_i, .rst_ni,
    .raddr_a_i(dec.rs1), .rdata_a_o(rs1_val),
    .raddr_b_i(dec.rs2), .rdata_b_o(rs2_val),
    .we_i(rf_we), .waddr_i(dec.rd), .wdata_i(wb_data)
  );

  pv_operand #(.NUM_LIG(NUM_LIG), .NW(NW)) u_pvop (
    .rs1_i(rs1_val), .rs2_i(rs2_val),
    .ln_i(dec.pv_ln), .x_i(dec.pv_x), .pv_branch_i(dec.pv_branch),
    .pi_i(lig_pi), .i_next_i(lig_inext),
    .opa_o(opa_pv), .opb_o(opb_pv)
  );

  pv_controller #(.NUM_LIG(NUM_LIG)) u_ctrl (
    .id_valid_i(id_valid), .dec_i(dec), .br_taken_i(br_taken),
    .md_valid_i(md_valid), .lsu_done_i(lsu_done),
    .id_ready_o(id_ready), .md_en_o(md_en), .lsu_en_o(lsu_en),
    .rf_we_o(rf_we), .wb_sel_o(wb_sel),
    .redirect_o(redirect), .redirect_jalr_o(jalr_sel),
    .lig_init_o(lig_init), .lig_advance_o(lig_adv),
    .illegal_insn_o
  );

  // ---------------- EX block
  always_comb begin
    unique case (dec.opa_sel)
      OPA_PC:   alu_a = id_pc;
      OPA_ZERO: alu_a = '0;
      default:  alu_a = opa_pv;
    endcase
  end
  assign alu_b = dec.opb_imm ? dec.imm : opb_pv;

  pv_alu u_alu (.op_i(dec.alu_op), .br_op_i(dec.br_op), .a_i(alu_a), .b_i(alu_b),
                .result_o(alu_res), .taken_o(br_taken));

  pv_multdiv u_md (.clk_i, .rst_ni, .en_i(md_en), .op_i(dec.md_op), .a_i(opa_pv), .b_i(rs2_val),
                   .valid_o(md_valid), .result_o(md_res));

  pv_lsu u_lsu (
    .clk_i, .rst_ni,
    .en_i(lsu_en), .we_i(dec.is_store), .size_i(dec.ls_size), .unsigned_i(dec.ls_unsigned),
    .addr_i(alu_res), .wdata_i(rs2_val), .done_o(lsu_done), .rdata_o(lsu_rdata),
    .data_req_o, .data_gnt_i, .data_rvalid_i, .data_we_o, .data_be_o,
    .data_addr_o, .data_wdata_o, .data_rdata_i
  );

  assign pc_plus4    = id_pc + 32'd4;
  assign br_target   = id_pc + dec.imm;
  assign redirect_pc = jalr_sel ? ((rs1_val + dec.imm) & ~32'd1) : br_target;

  always_comb begin
    unique case (wb_sel)
      2'd1:    wb_data = md_res;
      2'd2:    wb_data = lsu_rdata;
      2'd3:    wb_data = pc_plus4;
      default: wb_data = alu_res;
    endcase
  end

  // ---------------- Loop Index Generators
  pv_prng u_rng (.clk_i, .rst_ni, .rnd_o(rnd));

  assign init_n = dec.pv_init_imm ? dec.imm[NW-1:0] : rs2_val[NW-1:0];

  for (genvar n = 0; n < NUM_LIG; n++) begin : g_lig
    pv_lig #(.B(B), .NW(NW)) u_lig (
      .clk_i, .rst_ni,
      .init_i(lig_init[n]), .n_i(init_n),
      .advance_i(lig_adv[n]), .rnd_i(rnd),
      .active_o(lig_active[n]), .n_o(lig_n[n]),
      .i_o(lig_i[n]), .i_next_o(lig_inext[n]), .pi_o(lig_pi[n])
    );
  end

  // A loop-closing pv branch must name a LIG that has been initialised.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (id_ready && dec.pv_branch && dec.pv_ln <= 2'(NUM_LIG)) |-> lig_active[dec.pv_ln - 2'd1]);
endmodule
