// tb_pv_prng: compares the generator with an independent bit-serial model of
// the 43-bit LFSR (x^43 + x^41 + x^20 + x + 1) and the 37-bit rule-90/150
// cellular automaton, and checks that every output bit toggles.
module tb_pv_prng;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] rnd;

  localparam logic [42:0] LS = 43'h123_4567_89AB;
  localparam logic [36:0] CS = 37'h0F_0F0F_1234;

  pv_prng #(.LFSR_SEED(LS), .CASR_SEED(CS)) dut (.clk_i(clk), .rst_ni(rst_n), .rnd_o(rnd));
  always #5 clk = ~clk;

  bit l [43];
  bit c [37];

  initial begin
    bit nl [43];
    bit nc [37];
    logic [31:0] exp, or_all, and_all;
    for (int k = 0; k < 43; k++) l[k] = LS[k];
    for (int k = 0; k < 37; k++) c[k] = CS[k];
    or_all = '0; and_all = '1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < 32; k++) exp[k] = l[k] ^ c[k];
      checks++;
      if (rnd !== exp) failures++;
      or_all |= rnd; and_all &= rnd;
      // advance the model
      nl[0] = l[42] ^ l[40] ^ l[19] ^ l[0];
      for (int k = 1; k < 43; k++) nl[k] = l[k-1];
      for (int k = 0; k < 37; k++) begin
        bit left, right;
        left  = (k > 0)  ? c[k-1] : 1'b0;
        right = (k < 36) ? c[k+1] : 1'b0;
        nc[k] = left ^ right ^ ((k == 28) ? c[k] : 1'b0);
      end
      l = nl; c = nc;
      @(posedge clk); #1;
    end
    checks++;
    if (or_all != '1 || and_all != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
