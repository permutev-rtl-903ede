// pv_alu: RV32I arithmetic/logic unit and branch comparator of the EX block.
// result_o = a_i <op> b_i for the ALU operations of pv_pkg; taken_o is the
// branch condition a_i <br_op> b_i. Shifts use b_i[4:0]. Combinational.
module pv_alu
  import pv_pkg::*;
(
  input  alu_op_e     op_i,
  input  br_op_e      br_op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] result_o,
  output logic        taken_o
);
  always_comb begin
    unique case (op_i)
      ALU_ADD:   result_o = a_i + b_i;
      ALU_SUB:   result_o = a_i - b_i;
      ALU_SLL:   result_o = a_i << b_i[4:0];
      ALU_SLT:   result_o = {31'b0, $signed(a_i) < $signed(b_i)};
      ALU_SLTU:  result_o = {31'b0, a_i < b_i};
      ALU_XOR:   result_o = a_i ^ b_i;
      ALU_SRL:   result_o = a_i >> b_i[4:0];
      ALU_SRA:   result_o = 32'($signed(a_i) >>> b_i[4:0]);
      ALU_OR:    result_o = a_i | b_i;
      ALU_AND:   result_o = a_i & b_i;
      ALU_PASSB: result_o = b_i;
      default:   result_o = '0;
    endcase
    unique case (br_op_i)
      BR_EQ:   taken_o = (a_i == b_i);
      BR_NE:   taken_o = (a_i != b_i);
      BR_LT:   taken_o = $signed(a_i) <  $signed(b_i);
      BR_GE:   taken_o = $signed(a_i) >= $signed(b_i);
      BR_LTU:  taken_o = a_i <  b_i;
      BR_GEU:  taken_o = a_i >= b_i;
      default: taken_o = 1'b0;
    endcase
  end
endmodule
