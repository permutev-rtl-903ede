// tb_pv_plsr: loads random blocks into the parallel-load shift register and
// checks that successive shifts present the loaded values in order, and that
// a load takes priority over a shift in the same cycle.
module tb_pv_plsr;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [7:0][2:0] d;
  logic [2:0] head;

  pv_plsr #(.B(8), .IW(3)) dut (.clk_i(clk), .rst_ni(rst_n), .load_i(load), .shift_i(shift),
                                .d_i(d), .head_o(head));
  always #5 clk = ~clk;

  initial begin
    logic [7:0][2:0] ref_blk;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      ref_blk = {$urandom, $urandom};
      @(negedge clk); d = ref_blk; load = 1; shift = (t % 2 == 1);
      @(negedge clk); load = 0; shift = 0;
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (head !== ref_blk[k]) failures++;
        shift = 1;
        @(negedge clk);
        shift = 0;
      end
    end
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
