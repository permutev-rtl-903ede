// tb_pv_alu: random operands for every ALU and branch operation, compared
// with SystemVerilog reference expressions.
module tb_pv_alu;
  import pv_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op;
  br_op_e  bop;
  logic [31:0] a, b, r;
  logic        tk;

  pv_alu dut (.op_i(op), .br_op_i(bop), .a_i(a), .b_i(b), .result_o(r), .taken_o(tk));

  initial begin
    for (int t = 0; t < 5000; t++) begin
      logic [31:0] e;
      bit et;
      int sa, sb;
      op  = alu_op_e'($urandom_range(0, 10));
      bop = br_op_e'($urandom_range(0, 5));
      a = $urandom; b = (t % 4 == 0) ? a : $urandom;
      if (t % 7 == 0) b = 32'($urandom_range(0, 31));
      #1;
      sa = a; sb = b;
      case (op)
        ALU_ADD:  e = a + b;
        ALU_SUB:  e = a - b;
        ALU_SLL:  e = a << b[4:0];
        ALU_SLT:  e = (sa < sb) ? 1 : 0;
        ALU_SLTU: e = (a < b) ? 1 : 0;
        ALU_XOR:  e = a ^ b;
        ALU_SRL:  e = a >> b[4:0];
        ALU_SRA:  e = sa >>> b[4:0];
        ALU_OR:   e = a | b;
        ALU_AND:  e = a & b;
        default:  e = b;
      endcase
      case (bop)
        BR_EQ:  et = (a == b);
        BR_NE:  et = (a != b);
        BR_LT:  et = (sa < sb);
        BR_GE:  et = (sa >= sb);
        BR_LTU: et = (a < b);
        default: et = (a >= b);
      endcase
      checks++;
      if (r !== e || tk !== et) failures++;
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
