// pv_lig: Loop Index Generator (LIG), the unit PermuteV adds to the core.
// pv.init/pv.initi load the loop's iteration count N (init_i, n_i). From
// then on the LIG presents, for the current iteration, the plain iteration
// number i_o and the permuted iteration number pi_o = (offset + p) mod N,
// where p comes from a random permutation of 0..B-1 (permute unit, shifted
// out of the PLSR one per iteration) and offset starts at rnd mod N and
// advances by B after every block of B iterations (Algorithm 1 of the paper).
// A block that would run past N (only the last one, when B does not divide
// N) is not permuted, so every index 0..N-1 is produced exactly once.
// advance_i (a retiring pv.beq/pv.bne) moves to the next iteration; all
// outputs are registered and reflect the new iteration in the next cycle.
// i_next_o = i_o + 1 is the count the loop-closing branch compares against.
// Widths: N and the indices are NW bits (NW is this design's choice).
module pv_lig #(
  parameter int unsigned B   = 4,
  parameter int unsigned NW  = 16,
  parameter int unsigned IW  = (B > 1) ? $clog2(B) : 1,
  parameter int unsigned NSW = B * $clog2(B) - B + 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          init_i,
  input  logic [NW-1:0] n_i,
  input  logic          advance_i,
  input  logic [31:0]   rnd_i,
  output logic          active_o,
  output logic [NW-1:0] n_o,
  output logic [NW-1:0] i_o,
  output logic [NW-1:0] i_next_o,
  output logic [NW-1:0] pi_o
);
  logic [NW-1:0]        n_q, i_q, offset;
  logic                 active_q;
  logic [B-1:0][IW-1:0] perm, ident, plsr_d;
  logic [IW-1:0]        head;
  logic                 block_end, reload, permute_next;
  logic [NW:0]          next_start, sum;

  // Control: decide when a new block starts and whether it is permuted.
  assign block_end    = advance_i && active_q && (((i_q + 1'b1) % NW'(B)) == '0);
  assign reload       = init_i || block_end;
  // First iteration of the block being loaded, and whether the whole block
  // lies inside [0, N): Algorithm 1 line 5, "i*B <= N".
  assign next_start   = init_i ? '0 : ({1'b0, i_q} + 1'b1);
  assign permute_next = (next_start + (NW+1)'(B)) <= {1'b0, (init_i ? n_i : n_q)};

  always_comb begin
    for (int k = 0; k < B; k++) ident[k] = IW'(k);
    plsr_d = permute_next ? perm : ident;
  end

  pv_permute_unit #(.B(B)) u_perm (.rnd_i(rnd_i[NSW-1:0]), .perm_o(perm));

  pv_plsr #(.B(B), .IW(IW)) u_plsr (
    .clk_i, .rst_ni,
    .load_i (reload),
    .shift_i(advance_i && active_q),
    .d_i    (plsr_d),
    .head_o (head)
  );

  pv_offset_gen #(.NW(NW), .B(B)) u_off (
    .clk_i, .rst_ni,
    .init_i  (init_i),
    .step_i  (block_end),
    .n_i     (init_i ? n_i : n_q),
    .rnd_i   (rnd_i[31 -: NW]),
    .offset_o(offset)
  );

  // Counter.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      n_q      <= '0;
      i_q      <= '0;
    end else if (init_i) begin
      active_q <= 1'b1;
      n_q      <= n_i;
      i_q      <= '0;
    end else if (advance_i && active_q) begin
      i_q      <= i_q + 1'b1;
    end
  end

  // Output: (offset + permuted number) mod N.
  assign sum      = {1'b0, offset} + (NW+1)'(head);
  assign pi_o     = (!active_q || n_q == '0) ? '0 : NW'(sum % {1'b0, n_q});
  assign i_o      = i_q;
  assign i_next_o = i_q + 1'b1;
  assign n_o      = n_q;
  assign active_o = active_q;
endmodule
