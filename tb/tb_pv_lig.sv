// tb_pv_lig: checks the Loop Index Generator against Algorithm 1.
// For many trip counts N (including N < B, N not a multiple of B and the
// paper's example N = 16), one pass of N iterations must produce every index
// 0..N-1 exactly once; the indices of block k must be
// {(offset0 + k*B + j) mod N, j < B} in some order; a block that runs past N
// must come out unpermuted; i_o must count iterations and i_next_o = i_o+1.
// Each index is available the cycle after init or after an advance.
// Runs B = 4 (paper's main configuration) and B = 8.
module tb_pv_lig;
  int checks = 0, failures = 0;
  int permuted_blocks = 0, ident_tail_blocks = 0;
  logic clk = 0, rst_n = 0;
  logic init4 = 0, adv4 = 0, init8 = 0, adv8 = 0;
  logic [15:0] n;
  logic [31:0] rnd;
  logic        act4, act8;
  logic [15:0] n4, i4, in4, pi4, n8, i8, in8, pi8;

  pv_lig #(.B(4), .NW(16)) dut4 (.clk_i(clk), .rst_ni(rst_n), .init_i(init4), .n_i(n),
    .advance_i(adv4), .rnd_i(rnd), .active_o(act4), .n_o(n4), .i_o(i4), .i_next_o(in4), .pi_o(pi4));
  pv_lig #(.B(8), .NW(16)) dut8 (.clk_i(clk), .rst_ni(rst_n), .init_i(init8), .n_i(n),
    .advance_i(adv8), .rnd_i(rnd), .active_o(act8), .n_o(n8), .i_o(i8), .i_next_o(in8), .pi_o(pi8));

  always #5 clk = ~clk;

  task automatic run(input int bs, input int nn, input logic [31:0] r);
    int seq[$];
    int off0, nblk;
    bit seen [int];
    @(negedge clk);
    n = 16'(nn); rnd = r;
    if (bs == 4) init4 = 1; else init8 = 1;
    @(negedge clk);
    init4 = 0; init8 = 0;
    off0 = int'(r[31:16]) % nn;
    for (int t = 0; t < nn; t++) begin
      int pi, ii, inx;
      rnd = $urandom;
      pi  = (bs == 4) ? int'(pi4) : int'(pi8);
      ii  = (bs == 4) ? int'(i4)  : int'(i8);
      inx = (bs == 4) ? int'(in4) : int'(in8);
      checks++;
      if (ii != t || inx != t + 1) failures++;
      seq.push_back(pi);
      if (bs == 4) adv4 = 1; else adv8 = 1;
      @(negedge clk);
      adv4 = 0; adv8 = 0;
    end
    // every index exactly once
    foreach (seq[k]) seen[seq[k]] = 1'b1;
    checks++;
    if (seen.num() != nn) begin failures++; $display("B=%0d N=%0d: not a permutation", bs, nn); end
    // block structure
    nblk = (nn + bs - 1) / bs;
    for (int k = 0; k < nblk; k++) begin
      bit in_order = 1'b1;
      for (int j = 0; j < bs && k * bs + j < nn; j++) begin
        int e;
        bit found = 1'b0;
        e = (off0 + k * bs + j) % nn;
        for (int q = 0; q < bs && k * bs + q < nn; q++) if (seq[k * bs + q] == e) found = 1'b1;
        checks++;
        if (!found) failures++;
        if (seq[k * bs + j] != e) in_order = 1'b0;
      end
      if ((k + 1) * bs > nn) begin
        checks++;
        if (!in_order) begin failures++; $display("B=%0d N=%0d: tail block permuted", bs, nn); end
        ident_tail_blocks++;
      end else if (!in_order) begin
        permuted_blocks++;
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper's example: N = 16, B = 4, offset 3
    run(4, 16, {16'd3, 16'($urandom)});
    for (int t = 0; t < 60; t++) begin
      run(4, $urandom_range(1, 70), $urandom);
      run(8, $urandom_range(1, 70), $urandom);
    end
    run(4, 1000, $urandom);
    run(8, 1000, $urandom);
    checks++;
    if (permuted_blocks < 100 || ident_tail_blocks < 10) failures++;
    $display("permuted blocks %0d, unpermuted tail blocks %0d", permuted_blocks, ident_tail_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
