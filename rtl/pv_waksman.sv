// pv_waksman: Waksman permutation network on B = 2^n W-bit values, built
// from pv_swap units.
// Structure (paper's permute-unit figure, drawn for B = 4): a column of B/2
// input swap units; output 0 of input switch k feeds input k of an upper
// B/2 network and output 1 feeds input k of a lower one; output pair 0 is
// (upper[0], lower[0]) with no switch, output pair k > 0 is a swap unit on
// (upper[k], lower[k]). The sub-networks are built the same way down to
// single 2x2 switches. The recursion is unrolled here level by level: n-1
// splitting levels (B/2 switches each), one centre column of B/2 switches
// and n-1 merging levels (B/2 - 2^l switches at level l). The network has
// B*log2(B) - B + 1 switches (5 for B = 4, 17 for B = 8) and can produce
// every permutation. Control bits are used in the order: splitting levels
// (top sub-block first), centre column, merging levels from the innermost
// out. For B = 4: input switches 0,1; upper middle 2; lower middle 3;
// output switch 4. Combinational.
module pv_waksman #(
  parameter int unsigned B   = 4,
  parameter int unsigned W   = 2,
  parameter int unsigned NSW = B * $clog2(B) - B + 1
) (
  input  logic [NSW-1:0]      ctrl_i,
  input  logic [B-1:0][W-1:0] d_i,
  output logic [B-1:0][W-1:0] d_o
);
  localparam int LOG = $clog2(B);
  localparam int H   = B / 2;

  // First control bit of merging level l.
  function automatic int merge_base(int l);
    int base = LOG * H;
    for (int q = LOG - 2; q > l; q--) base += H - (1 << q);
    return base;
  endfunction

  // lvl[0] = inputs, lvl[1..LOG-1] after the splitting levels, lvl[LOG]
  // after the centre column, lvl[LOG+1..2*LOG-1] after the merging levels.
  logic [2*LOG-1:0][B-1:0][W-1:0] lvl;

  assign lvl[0] = d_i;

  for (genvar l = 0; l < LOG - 1; l++) begin : g_split
    localparam int S = B >> l;
    for (genvar blk = 0; blk < (1 << l); blk++) begin : g_blk
      for (genvar k = 0; k < S / 2; k++) begin : g_sw
        pv_swap #(.W(W)) u_sw (
          .swap_i(ctrl_i[l * H + blk * (S / 2) + k]),
          .a_i(lvl[l][blk * S + 2 * k]), .b_i(lvl[l][blk * S + 2 * k + 1]),
          .a_o(lvl[l + 1][blk * S + k]), .b_o(lvl[l + 1][blk * S + S / 2 + k]));
      end
    end
  end

  for (genvar k = 0; k < H; k++) begin : g_centre
    pv_swap #(.W(W)) u_sw (
      .swap_i(ctrl_i[(LOG - 1) * H + k]),
      .a_i(lvl[LOG - 1][2 * k]), .b_i(lvl[LOG - 1][2 * k + 1]),
      .a_o(lvl[LOG][2 * k]), .b_o(lvl[LOG][2 * k + 1]));
  end

  for (genvar l = LOG - 2; l >= 0; l--) begin : g_merge
    localparam int S   = B >> l;
    localparam int SRC = LOG + (LOG - 2 - l);
    localparam int MB  = merge_base(l);
    for (genvar blk = 0; blk < (1 << l); blk++) begin : g_blk
      assign lvl[SRC + 1][blk * S]     = lvl[SRC][blk * S];
      assign lvl[SRC + 1][blk * S + 1] = lvl[SRC][blk * S + S / 2];
      for (genvar k = 1; k < S / 2; k++) begin : g_sw
        pv_swap #(.W(W)) u_sw (
          .swap_i(ctrl_i[MB + blk * (S / 2 - 1) + k - 1]),
          .a_i(lvl[SRC][blk * S + k]), .b_i(lvl[SRC][blk * S + S / 2 + k]),
          .a_o(lvl[SRC + 1][blk * S + 2 * k]), .b_o(lvl[SRC + 1][blk * S + 2 * k + 1]));
      end
    end
  end

  assign d_o = lvl[2 * LOG - 1];
endmodule
