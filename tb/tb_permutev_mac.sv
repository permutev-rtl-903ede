// tb_permutev_mac: the workload the paper evaluates, a dot product
// (multiply-accumulate of an input vector with a secret weight vector) with
// vector lengths 16, 32, 48 and 64, on the core with block size B = 4 (the
// default) and B = 8, 40 runs per length. Every run must give the right sum
// and touch every weight exactly once. Over the runs the share of weights
// computed in their original iteration must be near 1/N (between 0.25/N
// and 3/N of all weight uses), and nearly every run must be out of order.
module tb_permutev_mac;
  localparam int RUNS = 40;
  localparam int NS [4] = '{16, 32, 48, 64};
  logic clk = 0, rst_n = 0;
  logic done4, done8;
  int c4, f4, c8, f8, ns4, ns8;
  int h4 [4], h8 [4];
  int checks = 0, failures = 0;

  pv_mac_harness #(.B(4), .RUNS(RUNS)) u_b4 (.clk(clk), .rst_n(rst_n), .done(done4), .checks(c4),
    .failures(f4), .hits(h4), .nonseq_runs(ns4));
  pv_mac_harness #(.B(8), .RUNS(RUNS)) u_b8 (.clk(clk), .rst_n(rst_n), .done(done8), .checks(c8),
    .failures(f8), .hits(h8), .nonseq_runs(ns8));

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done4 && done8);
    checks = c4 + c8; failures = f4 + f8;
    for (int s = 0; s < 4; s++) begin
      $display("N=%0d: weights in original iteration B=4 %0d, B=8 %0d of %0d uses (1/N expects %0d)",
               NS[s], h4[s], h8[s], RUNS * NS[s], RUNS);
      checks += 2;
      if (h4[s] * 4 < RUNS || h4[s] > 3 * RUNS) failures++;
      if (h8[s] * 4 < RUNS || h8[s] > 3 * RUNS) failures++;
    end
    checks++;
    if (ns4 < 4 * RUNS - 2 || ns8 < 4 * RUNS - 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
