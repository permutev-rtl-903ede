// tb_permutev_rand: random-instruction test of the PermuteV core at its
// default parameters against an instruction-level reference model kept in
// this testbench. A random straight-line program mixes RV32I ALU and
// immediate instructions, lui/auipc, all of RV32M (with divide-by-zero and
// overflow operands), byte/half/word loads and stores, forward branches and
// jumps that skip one instruction, and PermuteV counterparts (R-type,
// shift-immediate and M-type with every Ln and x, and pv.beq/pv.bne).
// At every retirement the model checks the PC, the register write (or its
// absence) and, for pv branches, that the LIG's iteration count equals the
// number of pv branches it has seen since its pv.initi. The model takes the
// permuted index Ln.pi from the core, since the index sequence itself is
// checked by the LIG and end-to-end testbenches. At the end the data region
// must match the model's copy.
module tb_permutev_rand;
  import pv_asm_pkg::*;
  localparam int K = 1500;
  localparam int DATA = 'h6000, BASE = 31;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ireq, irvalid, dreq, drvalid, dwe, illegal;
  logic [31:0] iaddr, irdata, daddr, dwdata, drdata;
  logic [3:0] dbe;
  logic [31:0] mem [8192];

  permutev_core dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(32'h0),
    .instr_req_o(ireq), .instr_gnt_i(ireq), .instr_rvalid_i(irvalid),
    .instr_addr_o(iaddr), .instr_rdata_i(irdata),
    .data_req_o(dreq), .data_gnt_i(dreq), .data_rvalid_i(drvalid), .data_we_o(dwe),
    .data_be_o(dbe), .data_addr_o(daddr), .data_wdata_o(dwdata), .data_rdata_i(drdata),
    .debug_req_i(1'b0), .illegal_insn_o(illegal));

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    irvalid <= ireq;
    irdata  <= mem[iaddr[14:2]];
    drvalid <= dreq;
    if (dreq) begin
      drdata <= mem[daddr[14:2]];
      if (dwe) for (int k = 0; k < 4; k++) if (dbe[k]) mem[daddr[14:2]][8*k +: 8] <= dwdata[8*k +: 8];
    end
  end

  // ---------------- program generation
  int np = 0;
  logic [31:0] prog [8192];
  function automatic void emit(logic [31:0] w); prog[np] = w; np++; endfunction
  function automatic void li(int rd, int v);
    int lo, hi;
    lo = v & 'hFFF; if (lo >= 2048) lo -= 4096;
    hi = (v - lo) >>> 12;
    emit(lui(rd, hi)); emit(addi(rd, rd, lo));
  endfunction
  function automatic int rreg(); return $urandom_range(0, 30); endfunction
  function automatic int rdst(); return $urandom_range(1, 30); endfunction

  function automatic void gen_one();
    int c, rd, rs1, rs2, f3, ln, x, sz;
    c = $urandom_range(0, 11);
    rd = rdst(); rs1 = rreg(); rs2 = rreg();
    f3 = $urandom_range(0, 7);
    ln = $urandom_range(1, 3); x = $urandom_range(0, 2);
    case (c)
      0: emit(r_type((f3 == 0 || f3 == 5) && $urandom_range(0, 1) ? 7'h20 : 7'h00,
                     5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'b0110011));
      1: begin
        if (f3 == 1 || f3 == 5)
          emit(i_type({(f3 == 5 && $urandom_range(0, 1)) ? 7'h20 : 7'h00, 5'($urandom)}, 5'(rs1),
                      3'(f3), 5'(rd), 7'b0010011));
        else emit(i_type($urandom_range(0, 4095), 5'(rs1), 3'(f3), 5'(rd), 7'b0010011));
      end
      2: emit($urandom_range(0, 1) ? lui(rd, $urandom) : {20'($urandom), 5'(rd), 7'b0010111});
      3: emit(r_type(7'h01, 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'b0110011));
      4: begin  // load
        sz = $urandom_range(0, 4);
        case (sz)
          0: emit(i_type($urandom_range(0, 255), 5'(BASE), 3'b000, 5'(rd), 7'b0000011));
          1: emit(i_type($urandom_range(0, 255), 5'(BASE), 3'b100, 5'(rd), 7'b0000011));
          2: emit(i_type(2 * $urandom_range(0, 127), 5'(BASE), 3'b001, 5'(rd), 7'b0000011));
          3: emit(i_type(2 * $urandom_range(0, 127), 5'(BASE), 3'b101, 5'(rd), 7'b0000011));
          default: emit(i_type(4 * $urandom_range(0, 63), 5'(BASE), 3'b010, 5'(rd), 7'b0000011));
        endcase
      end
      5: begin  // store
        sz = $urandom_range(0, 2);
        case (sz)
          0: emit(s_type($urandom_range(0, 255), 5'(rs2), 5'(BASE), 3'b000));
          1: emit(s_type(2 * $urandom_range(0, 127), 5'(rs2), 5'(BASE), 3'b001));
          default: emit(s_type(4 * $urandom_range(0, 63), 5'(rs2), 5'(BASE), 3'b010));
        endcase
      end
      6: begin  // forward branch over one instruction
        f3 = $urandom_range(0, 5); if (f3 >= 2) f3 += 2;
        emit(b_type(8, 5'(rs2), 5'(rs1), 3'(f3)));
        emit(addi(rd, rd, 1));
      end
      7: begin emit(jal(rd, 8)); emit(addi(rd, rd, 1)); end
      8: emit(pv_r(r_type((f3 == 0 || f3 == 5) && $urandom_range(0, 1) ? 7'h20 : 7'h00,
                          5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'b0110011), ln, x));
      9: begin
        f3 = $urandom_range(0, 1) ? 1 : 5;
        emit(pv_r(i_type({(f3 == 5 && $urandom_range(0, 1)) ? 7'h20 : 7'h00, 5'($urandom)}, 5'(rs1),
                         3'(f3), 5'(rd), 7'b0010011), ln, x));
      end
      10: emit(pv_r(r_type(7'h01, 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'b0110011), ln, x));
      default: begin
        emit($urandom_range(0, 1) ? pv_bne(ln, x, rs1, 8) : pv_beq(ln, x, rs1, 8));
        emit(addi(rd, rd, 1));
      end
    endcase
  endfunction

  // ---------------- reference model
  logic [31:0] r [32];
  logic [31:0] pc;
  logic [7:0]  dm [256];
  int          pv_cnt [3];

  function automatic logic [31:0] mext(logic [2:0] f3, logic [31:0] a, logic [31:0] b);
    logic signed [63:0] s;
    logic [63:0] u;
    case (f3)
      3'd0: return a * b;
      3'd1: begin s = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b}); return s[63:32]; end
      3'd2: begin s = $signed({{32{a[31]}}, a}) * $signed({32'b0, b}); return s[63:32]; end
      3'd3: begin u = {32'b0, a} * {32'b0, b}; return u[63:32]; end
      3'd4: return (b == 0) ? 32'hFFFF_FFFF : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? a
                 : 32'($signed(a) / $signed(b));
      3'd5: return (b == 0) ? 32'hFFFF_FFFF : a / b;
      3'd6: return (b == 0) ? a : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? 32'h0
                 : 32'($signed(a) % $signed(b));
      default: return (b == 0) ? a : a % b;
    endcase
  endfunction

  function automatic logic [31:0] alu(logic [2:0] f3, bit alt, logic [31:0] a, logic [31:0] b);
    case (f3)
      3'd0: return alt ? a - b : a + b;
      3'd1: return a << b[4:0];
      3'd2: return ($signed(a) < $signed(b)) ? 32'd1 : 32'd0;
      3'd3: return (a < b) ? 32'd1 : 32'd0;
      3'd4: return a ^ b;
      3'd5: return alt ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
      3'd6: return a | b;
      default: return a & b;
    endcase
  endfunction

  // executes the instruction at pc; returns whether it writes rd and what
  function automatic void step(logic [31:0] w, output bit we, output logic [4:0] rd,
                               output logic [31:0] val, output bit pvb, output int pvln,
                               output int exp_cnt);
    logic [6:0] opc; logic [2:0] f3; logic [31:0] a, b, imm_i, imm_s, imm_b, ea, opa;
    int ln, x;
    bit alt, tk;
    opc = w[6:0]; f3 = w[14:12]; rd = w[11:7];
    a = r[w[19:15]]; b = r[w[24:20]];
    imm_i = {{20{w[31]}}, w[31:20]};
    imm_s = {{20{w[31]}}, w[31:25], w[11:7]};
    imm_b = {{19{w[31]}}, w[31], w[7], w[30:25], w[11:8], 1'b0};
    // Ln/x exist only in R-type words and in the shift immediates
    if (opc == 7'b0110011 || (opc == 7'b0010011 && (f3 == 3'd1 || f3 == 3'd5))) begin
      ln = int'(w[29:28]); x = int'(w[27:26]);
    end else begin
      ln = 0; x = 0;
    end
    we = 0; val = 0; pvb = 0; pvln = 0; exp_cnt = 0;
    opa = (ln != 0) ? a + (32'(dut.lig_pi[ln-1]) << x) : a;
    case (opc)
      7'b0110011: begin
        we = 1;
        if (w[25]) val = mext(f3, opa, b);
        else val = alu(f3, w[30], opa, b);
        pc += 4;
      end
      7'b0010011: begin
        we = 1;
        alt = (f3 == 3'd5) && w[30];
        val = alu(f3, alt, opa, (f3 == 3'd1 || f3 == 3'd5) ? {27'b0, w[24:20]} : imm_i);
        pc += 4;
      end
      7'b0110111: begin we = 1; val = {w[31:12], 12'b0}; pc += 4; end
      7'b0010111: begin we = 1; val = pc + {w[31:12], 12'b0}; pc += 4; end
      7'b0000011: begin
        we = 1; ea = a + imm_i - DATA;
        case (f3)
          3'd0: val = {{24{dm[ea][7]}}, dm[ea]};
          3'd4: val = {24'b0, dm[ea]};
          3'd1: val = {{16{dm[ea+1][7]}}, dm[ea+1], dm[ea]};
          3'd5: val = {16'b0, dm[ea+1], dm[ea]};
          default: val = {dm[ea+3], dm[ea+2], dm[ea+1], dm[ea]};
        endcase
        pc += 4;
      end
      7'b0100011: begin
        ea = a + imm_s - DATA;
        dm[ea] = b[7:0];
        if (f3 >= 3'd1) dm[ea+1] = b[15:8];
        if (f3 == 3'd2) begin dm[ea+2] = b[23:16]; dm[ea+3] = b[31:24]; end
        pc += 4;
      end
      7'b1100011: begin
        if (f3 == 3'd2 || f3 == 3'd3) begin
          // pv branch: compare with the count after this step, shifted
          ln = int'(w[23:22]); x = int'(w[21:20]);
          pvb = 1; pvln = ln;
          pv_cnt[ln-1]++;
          exp_cnt = pv_cnt[ln-1];
          b = 32'(pv_cnt[ln-1]) << x;
          tk = (f3 == 3'd2) ? (a == b) : (a != b);
        end else begin
          case (f3)
            3'd0: tk = a == b;
            3'd1: tk = a != b;
            3'd4: tk = $signed(a) < $signed(b);
            3'd5: tk = $signed(a) >= $signed(b);
            3'd6: tk = a < b;
            default: tk = a >= b;
          endcase
        end
        pc = tk ? pc + imm_b : pc + 4;
      end
      7'b1101111: begin we = 1; val = pc + 4;
        pc += {{11{w[31]}}, w[31], w[19:12], w[20], w[30:21], 1'b0}; end
      7'b0001011: begin pc += 4; pv_cnt[int'(w[8:7]) - 1] = 0; end
      default: pc += 4;
    endcase
    if (rd == 0) we = 0;
    if (we) r[rd] = val;
  endfunction

  // ---------------- lock-step comparison at retirement
  int retired = 0, pv_retired = 0, pvb_retired = 0, ref_done = 0;
  always_ff @(posedge clk) if (rst_n && !ref_done) begin
    if (illegal) begin failures++; $display("illegal instruction at %h", dut.id_pc); end
    if (dut.id_valid && dut.id_ready) begin
      automatic bit we, pvb;
      automatic logic [4:0] rd;
      automatic logic [31:0] val, w;
      automatic int pvln, ecnt;
      w = prog[dut.id_pc[14:2]];
      checks++;
      if (dut.id_pc != pc) begin
        failures++; $display("pc %h, model %h", dut.id_pc, pc);
        ref_done <= 1;
      end else begin
        if (w == {20'b0, 5'd0, 7'b1101111}) ref_done <= 1;
        if (w[29:28] != 0 && (w[6:0] == 7'b0110011 || (w[6:0] == 7'b0010011 && w[13:12] == 2'b01)))
          pv_retired++;
        step(w, we, rd, val, pvb, pvln, ecnt);
        retired++;
        checks++;
        if (we ? !(dut.rf_we && dut.dec.rd == rd && dut.wb_data == val)
               : (dut.rf_we && dut.dec.rd != 0)) begin
          failures++;
          $display("pc %h instr %h: core we %0d rd %0d data %h, model we %0d rd %0d data %h",
                   pc, w, dut.rf_we, dut.dec.rd, dut.wb_data, we, rd, val);
        end
        if (pvb) begin
          pvb_retired++;
          checks++;
          if (int'(dut.lig_inext[pvln-1]) != ecnt) begin
            failures++; $display("L%0d count %0d, model %0d", pvln, dut.lig_inext[pvln-1], ecnt);
          end
        end
      end
    end
  end

  initial begin
    int cyc, bad;
    foreach (mem[k]) mem[k] = '0;
    foreach (prog[k]) prog[k] = '0;
    foreach (dm[k]) dm[k] = 8'($urandom);
    for (int k = 0; k < 64; k++) mem[(DATA >> 2) + k] = {dm[4*k+3], dm[4*k+2], dm[4*k+1], dm[4*k]};
    // set-up: every LIG running with a large N, registers with random and corner values
    li(BASE, DATA);
    for (int n = 1; n <= 3; n++) emit(pv_initi(n, 1000 + n));
    for (int k = 1; k < 31; k++) begin
      case ($urandom_range(0, 5))
        0: li(k, 0);
        1: li(k, -1);
        2: li(k, 32'h8000_0000);
        default: li(k, $urandom);
      endcase
    end
    for (int k = 0; k < K; k++) gen_one();
    emit(jal(0, 0));
    for (int k = 0; k < np; k++) mem[k] = prog[k];

    foreach (r[k]) r[k] = 0;
    pc = 0; pv_cnt = '{0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!ref_done && cyc < 100000) begin @(posedge clk); cyc++; end
    repeat (2) @(posedge clk);
    checks++;
    if (!ref_done) begin failures++; $display("program did not reach its end"); end
    bad = 0;
    for (int k = 0; k < 64; k++)
      if (mem[(DATA >> 2) + k] != {dm[4*k+3], dm[4*k+2], dm[4*k+1], dm[4*k]}) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%0d data words differ", bad); end
    $display("retired %0d instructions (%0d pv arithmetic, %0d pv branches) in %0d cycles",
             retired, pv_retired, pvb_retired, cyc);
    checks++;
    if (pv_retired < 200 || pvb_retired < 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
