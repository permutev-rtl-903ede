// tb_pv_offset_gen: checks offset = rnd mod N after init and
// offset = (offset + B) mod N after each step, for random N including
// N < B, and offset 0 for N = 0.
module tb_pv_offset_gen;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, step = 0;
  logic [15:0] n, rnd, off;

  pv_offset_gen #(.NW(16), .B(4)) dut (.clk_i(clk), .rst_ni(rst_n), .init_i(init), .step_i(step),
                                       .n_i(n), .rnd_i(rnd), .offset_o(off));
  always #5 clk = ~clk;

  initial begin
    int exp;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      n   = (t % 3 == 0) ? 16'($urandom_range(1, 6)) : 16'($urandom_range(1, 3000));
      if (t == 7) n = 0;
      rnd = 16'($urandom);
      init = 1;
      @(negedge clk); init = 0;
      exp = (n == 0) ? 0 : int'(rnd) % int'(n);
      checks++;
      if (int'(off) != exp) failures++;
      for (int s = 0; s < 5; s++) begin
        step = 1;
        @(negedge clk); step = 0;
        exp = (n == 0) ? 0 : (exp + 4) % int'(n);
        checks++;
        if (int'(off) != exp) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
