// pv_controller: sequencing of the ID/EX stage.
// The instruction in the IF/ID register executes in this stage. It completes
// (id_ready_o) in the same cycle when it is single-cycle, when the
// multiplier/divider reports a result, or when the LSU reports the bus
// response. At completion it writes the register file, redirects fetch for
// taken branches and jumps, and drives the PermuteV side effects:
//   pv.init(i) -> lig_init_o[Ln-1]   (load N, start a new permutation)
//   pv.beq/bne -> lig_advance_o[Ln-1] (next iteration), taken or not.
// Illegal instructions complete as no-ops and pulse illegal_insn_o.
// Multi-cycle instructions keep md_en_o / lsu_en_o high until they finish.
module pv_controller
  import pv_pkg::*;
#(
  parameter int unsigned NUM_LIG = 3
) (
  input  logic               id_valid_i,
  input  dec_t               dec_i,
  input  logic               br_taken_i,
  input  logic               md_valid_i,
  input  logic               lsu_done_i,
  output logic               id_ready_o,
  output logic               md_en_o,
  output logic               lsu_en_o,
  output logic               rf_we_o,
  output logic [1:0]         wb_sel_o,      // 0 ALU, 1 MULT/DIV, 2 LSU, 3 PC+4
  output logic               redirect_o,
  output logic               redirect_jalr_o,
  output logic [NUM_LIG-1:0] lig_init_o,
  output logic [NUM_LIG-1:0] lig_advance_o,
  output logic               illegal_insn_o
);
  logic mem_op, done;

  assign mem_op   = dec_i.is_load || dec_i.is_store;
  assign md_en_o  = id_valid_i && dec_i.is_md;
  assign lsu_en_o = id_valid_i && mem_op;

  always_comb begin
    if (dec_i.is_md)  done = md_valid_i;
    else if (mem_op)  done = lsu_done_i;
    else              done = 1'b1;
  end

  assign id_ready_o      = id_valid_i && done;
  assign rf_we_o         = id_ready_o && dec_i.rf_we;
  assign redirect_o      = id_ready_o && (dec_i.is_jal || dec_i.is_jalr || (dec_i.is_branch && br_taken_i));
  assign redirect_jalr_o = dec_i.is_jalr;
  assign illegal_insn_o  = id_ready_o && dec_i.illegal;

  always_comb begin
    if (dec_i.is_jal || dec_i.is_jalr) wb_sel_o = 2'd3;
    else if (dec_i.is_load)            wb_sel_o = 2'd2;
    else if (dec_i.is_md)              wb_sel_o = 2'd1;
    else                               wb_sel_o = 2'd0;
  end

  always_comb begin
    for (int n = 0; n < NUM_LIG; n++) begin
      lig_init_o[n]    = id_ready_o && dec_i.pv_init   && (dec_i.pv_ln == 2'(n + 1));
      lig_advance_o[n] = id_ready_o && dec_i.pv_branch && (dec_i.pv_ln == 2'(n + 1));
    end
  end
endmodule
