// tb_pv_regfile: random writes and reads against an array model; x0 reads 0.
module tb_pv_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] ra, rb, wa;
  logic [31:0] da, db, wd;
  logic [31:0] model [32];

  pv_regfile dut (.clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .rdata_a_o(da),
                  .raddr_b_i(rb), .rdata_b_o(db), .we_i(we), .waddr_i(wa), .wdata_i(wd));
  always #5 clk = ~clk;

  initial begin
    foreach (model[k]) model[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom);
      #1;
      checks++;
      if (da !== model[ra] || db !== model[rb]) failures++;
      we = 1'($urandom); wa = 5'($urandom); wd = $urandom;
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
      #1 we = 0;
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
