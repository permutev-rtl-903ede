// pv_permute_unit: produces a permutation of the block indices 0..B-1.
// The identity sequence 0..B-1 is fed into a Waksman network of swap units
// (pv_waksman) whose swap signals are individual bits of the random word,
// following the paper's permute-unit description. B must be a power of two
// (the paper restricts it so). Combinational: perm_o follows rnd_i.
module pv_permute_unit #(
  parameter int unsigned B   = 4,
  parameter int unsigned IW  = (B > 1) ? $clog2(B) : 1,
  parameter int unsigned NSW = B * $clog2(B) - B + 1
) (
  input  logic [NSW-1:0]       rnd_i,
  output logic [B-1:0][IW-1:0] perm_o
);
  logic [B-1:0][IW-1:0] ident;

  always_comb begin
    for (int k = 0; k < B; k++) ident[k] = IW'(k);
  end

  pv_waksman #(.B(B), .W(IW)) u_net (.ctrl_i(rnd_i), .d_i(ident), .d_o(perm_o));
endmodule
