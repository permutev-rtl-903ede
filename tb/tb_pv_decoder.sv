// tb_pv_decoder: decodes hand-encoded RV32IM and PermuteV instructions and
// compares the fields that matter with the values expected from the
// encodings (Ln/x positions, funct3 of pv branches, custom-0 pv.init(i)).
module tb_pv_decoder;
  import pv_pkg::*;
  import pv_asm_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  dec_t d;

  pv_decoder dut (.instr_i(instr), .dec_o(d));

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s instr=%h", what, instr); end
  endtask

  initial begin
    instr = add(5, 6, 7); #1;
    chk("add", !d.illegal && d.rf_we && d.alu_op == ALU_ADD && d.pv_ln == 0 && d.rd == 5 && d.rs1 == 6 && d.rs2 == 7);
    instr = pv_add(1, 2, 5, 15, 0); #1;
    chk("pv.add", !d.illegal && d.alu_op == ALU_ADD && d.pv_ln == 1 && d.pv_x == 2 && d.rs1 == 15 && !d.is_md);
    instr = pv_sub(3, 1, 5, 6, 7); #1;
    chk("pv.sub", !d.illegal && d.alu_op == ALU_SUB && d.pv_ln == 3 && d.pv_x == 1);
    instr = pv_mul(2, 0, 6, 0, 5); #1;
    chk("pv.mul", !d.illegal && d.is_md && d.md_op == MD_MUL && d.pv_ln == 2 && d.pv_x == 0);
    instr = pv_r(r_type(7'h01, 5'd3, 5'd4, 3'b101, 5'd2, 7'b0110011), 1, 1); #1;
    chk("pv.divu", !d.illegal && d.is_md && d.md_op == MD_DIVU && d.pv_ln == 1);
    instr = pv_r(r_type(7'h20, 5'd3, 5'd4, 3'b101, 5'd2, 7'b0110011), 2, 0); #1;
    chk("pv.sra", !d.illegal && d.alu_op == ALU_SRA && d.pv_ln == 2);
    instr = pv_slli(1, 2, 4, 5, 3); #1;
    chk("pv.slli", !d.illegal && d.alu_op == ALU_SLL && d.opb_imm && d.imm == 3 && d.pv_ln == 1 && d.pv_x == 2);
    instr = pv_r(i_type(32'h400 | 7, 5'd5, 3'b101, 5'd4, 7'b0010011), 3, 0); #1;
    chk("pv.srai", !d.illegal && d.alu_op == ALU_SRA && d.imm == 7 && d.pv_ln == 3);
    instr = pv_bne(1, 0, 12, -24); #1;
    chk("pv.bne", !d.illegal && d.is_branch && d.pv_branch && d.br_op == BR_NE && d.pv_ln == 1 && d.pv_x == 0 && d.rs1 == 12 && d.imm == 32'(-24));
    instr = pv_beq(2, 2, 7, 16); #1;
    chk("pv.beq", !d.illegal && d.pv_branch && d.br_op == BR_EQ && d.pv_ln == 2 && d.pv_x == 2 && d.imm == 16);
    instr = bne(5, 6, -8); #1;
    chk("bne", !d.illegal && d.is_branch && !d.pv_branch && d.br_op == BR_NE && d.rs2 == 6 && d.imm == 32'(-8));
    instr = b_type(8, 5'd1, 5'd2, 3'b110); #1;
    chk("bltu", !d.illegal && !d.pv_branch && d.br_op == BR_LTU);
    instr = pv_init(2, 12); #1;
    chk("pv.init", !d.illegal && d.pv_init && !d.pv_init_imm && d.pv_ln == 2 && d.rs2 == 12 && !d.rf_we);
    instr = pv_initi(3, 1000); #1;
    chk("pv.initi", !d.illegal && d.pv_init && d.pv_init_imm && d.pv_ln == 3 && d.imm == 1000);
    instr = lw(3, 4, -4); #1;
    chk("lw", !d.illegal && d.is_load && d.ls_size == LS_WORD && d.imm == 32'(-4));
    instr = sb(3, 4, 5); #1;
    chk("sb", !d.illegal && d.is_store && d.ls_size == LS_BYTE && d.imm == 5 && !d.rf_we);
    instr = jal(1, 2048); #1;
    chk("jal", !d.illegal && d.is_jal && d.imm == 2048);
    instr = lui(3, 20'hABCDE); #1;
    chk("lui", !d.illegal && d.opa_sel == OPA_ZERO && d.imm == 32'hABCDE000);
    // x field without Ln, and x = 3, are illegal
    instr = add(1, 2, 3) | 32'h0400_0000; #1;
    chk("x without Ln", d.illegal && !d.rf_we);
    instr = pv_add(1, 3, 1, 2, 3); #1;
    chk("x=3", d.illegal);
    instr = b_type(8, 5'd0, 5'd2, 3'b011); #1;
    chk("pv.bne with Ln=0", d.illegal && !d.is_branch);
    instr = 32'h0000_0073; #1;
    chk("ecall", d.illegal);
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
