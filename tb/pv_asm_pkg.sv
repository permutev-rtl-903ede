// pv_asm_pkg: instruction encoders for the testbenches (RV32IM plus the
// PermuteV instructions). ln = 1..3 selects LIG L1..L3, x the left shift.
// pv.init/pv.initi use the custom-0 encoding chosen by the design
// (Ln in inst[8:7]).
package pv_asm_pkg;
  function automatic logic [31:0] r_type(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                         logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_type(int imm, logic [4:0] rs1, logic [2:0] f3,
                                         logic [4:0] rd, logic [6:0] opc);
    return {12'(imm), rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] s_type(int imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], rs2, rs1, f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(int off, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], rs2, rs1, f3, i[4:1], i[11], 7'b1100011};
  endfunction

  // RV32I / RV32M
  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_type(imm, 5'(rs1), 3'b000, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_type(sh, 5'(rs1), 3'b001, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] lui(int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2); return r_type(7'h00, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2); return r_type(7'h20, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] mul(int rd, int rs1, int rs2); return r_type(7'h01, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] div(int rd, int rs1, int rs2); return r_type(7'h01, 5'(rs2), 5'(rs1), 3'b100, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm);  return i_type(imm, 5'(rs1), 3'b010, 5'(rd), 7'b0000011); endfunction
  function automatic logic [31:0] lb(int rd, int rs1, int imm);  return i_type(imm, 5'(rs1), 3'b000, 5'(rd), 7'b0000011); endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm); return s_type(imm, 5'(rs2), 5'(rs1), 3'b010); endfunction
  function automatic logic [31:0] sb(int rs2, int rs1, int imm); return s_type(imm, 5'(rs2), 5'(rs1), 3'b000); endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return b_type(off, 5'(rs2), 5'(rs1), 3'b000); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return b_type(off, 5'(rs2), 5'(rs1), 3'b001); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off); return b_type(off, 5'(rs2), 5'(rs1), 3'b100); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  // PermuteV: R-type counterpart of an RV32IM R-type word
  function automatic logic [31:0] pv_r(logic [31:0] base, int ln, int x);
    logic [31:0] w = base;
    w[29:28] = 2'(ln); w[27:26] = 2'(x);
    return w;
  endfunction
  function automatic logic [31:0] pv_add(int ln, int x, int rd, int rs1, int rs2); return pv_r(add(rd, rs1, rs2), ln, x); endfunction
  function automatic logic [31:0] pv_sub(int ln, int x, int rd, int rs1, int rs2); return pv_r(sub(rd, rs1, rs2), ln, x); endfunction
  function automatic logic [31:0] pv_mul(int ln, int x, int rd, int rs1, int rs2); return pv_r(mul(rd, rs1, rs2), ln, x); endfunction
  function automatic logic [31:0] pv_slli(int ln, int x, int rd, int rs1, int sh); return pv_r(slli(rd, rs1, sh), ln, x); endfunction
  function automatic logic [31:0] pv_bne(int ln, int x, int rs1, int off);
    logic [31:0] w = b_type(off, 5'(4 * ln + x), 5'(rs1), 3'b011);
    return w;
  endfunction
  function automatic logic [31:0] pv_beq(int ln, int x, int rs1, int off);
    return b_type(off, 5'(4 * ln + x), 5'(rs1), 3'b010);
  endfunction
  function automatic logic [31:0] pv_init(int ln, int rs2);
    return {7'b0, 5'(rs2), 5'b0, 3'b000, 3'b0, 2'(ln), 7'b0001011};
  endfunction
  function automatic logic [31:0] pv_initi(int ln, int imm);
    return {12'(imm), 5'b0, 3'b001, 3'b0, 2'(ln), 7'b0001011};
  endfunction
endpackage
