// tb_pv_multdiv: all RV32M operations on random and corner operands
// (zero divisor, -2^31 / -1) against 64-bit reference arithmetic. Multiplies
// must answer in the request cycle and divides exactly 33 cycles after it.
module tb_pv_multdiv;
  import pv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, valid;
  md_op_e op;
  logic [31:0] a, b, r;

  pv_multdiv dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .op_i(op), .a_i(a), .b_i(b),
                  .valid_o(valid), .result_o(r));
  always #5 clk = ~clk;

  function automatic logic [31:0] ref_md(md_op_e o, logic [31:0] x, logic [31:0] y);
    longint sx, sy, ux, uy;
    sx = longint'($signed(x)); sy = longint'($signed(y));
    ux = longint'({32'b0, x}); uy = longint'({32'b0, y});
    case (o)
      MD_MUL:    return 32'(sx * sy);
      MD_MULH:   return 32'((sx * sy) >>> 32);
      MD_MULHSU: return 32'((sx * uy) >>> 32);
      MD_MULHU:  return 32'((ux * uy) >> 32);
      MD_DIV:    return (y == 0) ? 32'hFFFF_FFFF : 32'(sx / sy);
      MD_DIVU:   return (y == 0) ? 32'hFFFF_FFFF : 32'(ux / uy);
      MD_REM:    return (y == 0) ? x : 32'(sx % sy);
      default:   return (y == 0) ? x : 32'(ux % uy);
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 800; t++) begin
      int cyc;
      @(negedge clk);
      op = md_op_e'(t % 8);
      a = $urandom; b = $urandom;
      if (t % 5 == 1) b = 32'($urandom_range(1, 300));
      if (t % 5 == 2) a = -a;
      if (t % 37 == 3) b = 0;
      if (t % 41 == 4) begin a = 32'h8000_0000; b = 32'hFFFF_FFFF; end
      en = 1; cyc = 0;
      #1;
      while (!valid) begin
        @(negedge clk); cyc++;
        #1;
        if (cyc > 100) break;
      end
      checks++;
      if (r !== ref_md(op, a, b)) begin
        failures++;
        $display("op %0d a %h b %h got %h exp %h", op, a, b, r, ref_md(op, a, b));
      end
      checks++;
      if (cyc != ((t % 8 < 4) ? 0 : 33)) failures++;
      @(negedge clk); en = 0;
    end
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
