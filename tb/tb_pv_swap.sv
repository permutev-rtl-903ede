// tb_pv_swap: exhaustive check of the 2x2 swap unit (bypass and swap).
module tb_pv_swap;
  int checks = 0, failures = 0;
  logic       sw;
  logic [2:0] a, b, ao, bo;

  pv_swap #(.W(3)) dut (.swap_i(sw), .a_i(a), .b_i(b), .a_o(ao), .b_o(bo));

  initial begin
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++) begin
          sw = s[0]; a = 3'(i); b = 3'(j);
          #1;
          checks++;
          if (s == 0 && !(ao == 3'(i) && bo == 3'(j))) failures++;
          if (s == 1 && !(ao == 3'(j) && bo == 3'(i))) failures++;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
