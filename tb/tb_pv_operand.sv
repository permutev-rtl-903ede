// tb_pv_operand: random check of the pv operand path:
// opa = rs1 + (Ln.pi << x) for R/I-type pv instructions, opb = Ln.i << x for
// pv branches, plain rs1/rs2 when Ln = 0.
module tb_pv_operand;
  int checks = 0, failures = 0;
  logic [31:0] rs1, rs2, opa, opb;
  logic [1:0]  ln, x;
  logic        br;
  logic [2:0][15:0] pi, inx;

  pv_operand #(.NUM_LIG(3), .NW(16)) dut (.rs1_i(rs1), .rs2_i(rs2), .ln_i(ln), .x_i(x),
    .pv_branch_i(br), .pi_i(pi), .i_next_i(inx), .opa_o(opa), .opb_o(opb));

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [31:0] ea, eb;
      rs1 = $urandom; rs2 = $urandom; ln = 2'($urandom); x = 2'($urandom_range(0, 2));
      br = 1'($urandom);
      for (int k = 0; k < 3; k++) begin pi[k] = 16'($urandom); inx[k] = 16'($urandom); end
      #1;
      ea = rs1; eb = rs2;
      if (ln != 0 && !br) ea = rs1 + ({16'b0, pi[ln-1]} * (32'd1 << x));
      if (ln != 0 && br)  eb = {16'b0, inx[ln-1]} * (32'd1 << x);
      checks++;
      if (opa !== ea || opb !== eb) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
