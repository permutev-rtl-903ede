// pv_plsr: parallel-load shift register between the permute unit and the
// output adder of the LIG. load_i copies B permutation numbers in at once;
// shift_i moves them down one place so that head_o gives the number for the
// next loop iteration. load_i has priority over shift_i. head_o is the
// registered entry 0, so it is valid the cycle after a load or shift.
module pv_plsr #(
  parameter int unsigned B  = 4,
  parameter int unsigned IW = 2
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 load_i,
  input  logic                 shift_i,
  input  logic [B-1:0][IW-1:0] d_i,
  output logic [IW-1:0]        head_o
);
  logic [B-1:0][IW-1:0] q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      q <= '0;
    end else if (load_i) begin
      q <= d_i;
    end else if (shift_i) begin
      for (int k = 0; k < B - 1; k++) q[k] <= q[k+1];
      q[B-1] <= '0;
    end
  end

  assign head_o = q[0];
endmodule
