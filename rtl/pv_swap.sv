// pv_swap: one 2x2 swap unit of the permute network. With swap_i = 0 the two
// values pass straight (bypass); with swap_i = 1 they cross, as drawn in the
// paper's permute-unit figure. Purely combinational.
module pv_swap #(
  parameter int unsigned W = 2
) (
  input  logic         swap_i,
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  output logic [W-1:0] a_o,
  output logic [W-1:0] b_o
);
  assign a_o = swap_i ? b_i : a_i;
  assign b_o = swap_i ? a_i : b_i;
endmodule
