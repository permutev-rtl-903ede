// pv_offset_gen: block offset register of the Loop Index Generator.
// As in the paper's LIG figure, a multiplexer picks either the random word
// (on init_i) or offset + B (on step_i, once per block of B iterations), the
// result is reduced modulo N and registered. The offset therefore starts
// uniformly-ish in [0, N-1] and walks forward by B, wrapping at N.
// N = 0 yields offset 0. offset_o is valid the cycle after init_i/step_i.
module pv_offset_gen #(
  parameter int unsigned NW = 16,
  parameter int unsigned B  = 4
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          init_i,
  input  logic          step_i,
  input  logic [NW-1:0] n_i,
  input  logic [NW-1:0] rnd_i,
  output logic [NW-1:0] offset_o
);
  logic [NW:0]   sel;
  logic [NW-1:0] offset_q, offset_d;

  always_comb begin
    sel      = init_i ? {1'b0, rnd_i} : ({1'b0, offset_q} + (NW+1)'(B));
    offset_d = (n_i == '0) ? '0 : NW'(sel % {1'b0, n_i});
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                offset_q <= '0;
    else if (init_i || step_i)  offset_q <= offset_d;
  end

  assign offset_o = offset_q;
endmodule
