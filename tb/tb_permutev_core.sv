// tb_permutev_core: end-to-end test of the PermuteV core at its default
// parameters (three LIGs, B = 4). A program built with pv_asm_pkg runs the
// four loop styles of the paper's code-generation examples plus a ReLU-style
// loop and a divide:
//   P0  standard RV32 dot product (reference timing)
//   P1  dot product with pv.add/pv.bne (L1), run three times
//   P2  linear index j = 3i+1 with pv.mul (L1)
//   P3  nonlinear index j = i*i+1 with pv.add/pv.sub/pv.slli (L2)
//   P4  nested loops, outer L1, inner L2
//   P5  ReLU C[j] = max(0, A[j]) with pv.beq (L3), N not a multiple of B
//   P6  div (multi-cycle stall) and a pv.initi loop
// Results are compared with sums computed here; the load/store address
// streams of P1 and P5 must visit every element exactly once and not in
// sequential order; P1 must take exactly as many cycles as P0 (same number
// of instructions per iteration). Each mechanism (LIG init, advance,
// permuted block, unpermuted tail block, index wrap mod N, two LIGs active,
// MULT/DIV stall, LSU wait, branch redirect, wrong-path prefetch response
// dropped, prefetch FIFO holding words) is counted and must occur.
module tb_permutev_core;
  import pv_asm_pkg::*;
  int checks = 0, failures = 0;

  localparam int A = 'h1000, BB = 'h1400, C = 'h1800, RES = 'h1C00, A3 = 'h2000, B3 = 'h2400;
  localparam int TOHOST = 'h3FFC;
  localparam int N0 = 32, N1 = 32, N2 = 20, N3 = 11, N4 = 6, M4 = 10, N5 = 13;
  // registers
  localparam int T0 = 5, T1 = 6, T2 = 7, S1 = 9, A0 = 10, A1 = 11, A2 = 12, A3R = 13, A4 = 14,
                 A5 = 15, A6 = 16, S2 = 18, S3 = 19, S4 = 20, T3 = 28, T4 = 29;

  logic clk = 0, rst_n = 0;
  logic ireq, igrant, irvalid, dreq, dgnt, drvalid, dwe, illegal;
  logic [31:0] iaddr, irdata, daddr, dwdata, drdata;
  logic [3:0] dbe;
  logic [31:0] mem [4096];

  permutev_core dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(32'h0),
    .instr_req_o(ireq), .instr_gnt_i(igrant), .instr_rvalid_i(irvalid),
    .instr_addr_o(iaddr), .instr_rdata_i(irdata),
    .data_req_o(dreq), .data_gnt_i(dgnt), .data_rvalid_i(drvalid), .data_we_o(dwe),
    .data_be_o(dbe), .data_addr_o(daddr), .data_wdata_o(dwdata), .data_rdata_i(drdata),
    .debug_req_i(1'b0), .illegal_insn_o(illegal));

  always #5 clk = ~clk;

  // ---------------- memory: one array behind both ports, answer next cycle
  assign igrant = ireq;
  assign dgnt   = dreq;
  always_ff @(posedge clk) begin
    irvalid <= ireq && igrant;
    irdata  <= mem[iaddr[13:2]];
    drvalid <= dreq && dgnt;
    if (dreq && dgnt) begin
      drdata <= mem[daddr[13:2]];
      if (dwe) for (int k = 0; k < 4; k++) if (dbe[k]) mem[daddr[13:2]][8*k +: 8] <= dwdata[8*k +: 8];
    end
  end

  // ---------------- program assembly
  int np = 0;
  function automatic void emit(logic [31:0] w);
    mem[np] = w; np++;
  endfunction
  function automatic int here(); return np * 4; endfunction
  function automatic void li(int rd, int v);
    int lo, hi;
    lo = v & 'hFFF; if (lo >= 2048) lo -= 4096;
    hi = (v - lo) >>> 12;
    emit(lui(rd, hi)); emit(addi(rd, rd, lo));
  endfunction

  int l0s, l0e, l1s, l1e, p5_done_fix, l5, jmp5;

  task automatic build();
    int rep, lp, outer, inner, l6;
    np = 0;
    li(S2, RES);
    // P0: standard RV32 dot product (Fig. 6 type 1, left column)
    li(A5, A); li(A1, BB); li(A0, 0); li(T3, A + 4 * N0);
    l0s = here();
    emit(lw(A4, A5, 0)); emit(lw(A3R, A1, 0)); emit(mul(A4, A4, A3R)); emit(add(A0, A0, A4));
    emit(addi(A5, A5, 4)); emit(addi(A1, A1, 4));
    emit(bne(A5, T3, l0s - here()));
    l0e = here();
    emit(sw(A0, S2, 40));
    // P1: PermuteV dot product, three repetitions
    li(S1, 3);
    rep = here();
    li(A5, A); li(A1, BB); li(A2, N1); li(A0, 0);
    emit(pv_init(1, A2));
    l1s = here();
    emit(pv_add(1, 2, T0, A5, 0)); emit(pv_add(1, 2, T1, A1, 0));
    emit(lw(A4, T0, 0)); emit(lw(A3R, T1, 0)); emit(mul(A4, A4, A3R)); emit(add(A0, A0, A4));
    emit(pv_bne(1, 0, A2, l1s - here()));
    l1e = here();
    emit(sw(A0, S2, 0)); emit(addi(S2, S2, 4)); emit(addi(S1, S1, -1));
    emit(bne(S1, 0, rep - here()));
    // P2: linear index j = 3i + 1
    li(T0, 12); li(A2, N2); li(A0, 0); li(A5, A); li(A1, BB);
    emit(pv_init(1, A2));
    lp = here();
    emit(pv_mul(1, 0, T1, 0, T0)); emit(pv_mul(1, 0, T2, 0, T0));
    emit(add(T1, T1, A5)); emit(add(T2, T2, A1));
    emit(lw(A4, T1, 4)); emit(lw(A3R, T2, 4)); emit(mul(A4, A4, A3R)); emit(add(A0, A0, A4));
    emit(pv_bne(1, 0, A2, lp - here()));
    emit(sw(A0, S2, 0)); emit(addi(S2, S2, 4));
    // P3: nonlinear index j = i*i + 1 on L2, plus pv.sub and pv.slli
    li(A6, A3); li(A1, B3); li(A2, N3); li(A0, 0); li(S3, 0); li(S4, 0);
    emit(pv_init(2, A2));
    lp = here();
    emit(pv_add(2, 0, A4, 0, 0));
    emit(mul(A5, A4, A4)); emit(addi(A5, A5, 1)); emit(slli(A5, A5, 2));
    emit(add(A3R, A6, A5)); emit(add(A5, A1, A5));
    emit(lw(A3R, A3R, 0)); emit(lw(A5, A5, 0)); emit(mul(A5, A3R, A5)); emit(add(A0, A0, A5));
    emit(pv_sub(2, 1, T3, 0, 0)); emit(add(S3, S3, T3));
    emit(pv_slli(2, 0, T4, 0, 3)); emit(add(S4, S4, T4));
    emit(pv_bne(2, 0, A2, lp - here()));
    emit(sw(A0, S2, 0)); emit(sw(S3, S2, 4)); emit(sw(S4, S2, 8)); emit(addi(S2, S2, 12));
    // P4: nested loops
    li(A0, N4); li(A1, M4); li(A2, A); li(A3R, BB); li(A4, 0);
    emit(pv_init(1, A0));
    outer = here();
    emit(pv_add(1, 2, T0, A2, 0)); emit(lw(T0, T0, 0));
    emit(pv_init(2, A1));
    inner = here();
    emit(pv_add(2, 2, T1, A3R, 0)); emit(lw(T1, T1, 0)); emit(mul(T1, T0, T1)); emit(add(A4, A4, T1));
    emit(pv_bne(2, 0, A1, inner - here()));
    emit(pv_bne(1, 0, A0, outer - here()));
    emit(sw(A4, S2, 0)); emit(addi(S2, S2, 4));
    // P5: ReLU with pv.beq on L3
    li(A5, A); li(A6, C); li(A2, N5);
    emit(pv_init(3, A2));
    l5 = here();
    emit(pv_add(3, 2, T0, A5, 0)); emit(lw(T1, T0, 0)); emit(pv_add(3, 2, T2, A6, 0));
    emit(b_type(8, 5'd0, 5'(T1), 3'b101));          // bge t1, x0, +8
    emit(addi(T1, 0, 0));
    emit(sw(T1, T2, 0));
    p5_done_fix = np;
    emit(32'h0);                                      // pv.beq, patched below
    emit(jal(0, l5 - here()));
    mem[p5_done_fix] = pv_beq(3, 0, A2, here() - p5_done_fix * 4);
    // P6: divide and a pv.initi loop
    li(T0, 1000003); li(T1, 7);
    emit(div(T2, T0, T1)); emit(sw(T2, S2, 0));
    emit(pv_initi(1, 5)); li(A0, 0); li(A2, 5);
    l6 = here();
    emit(pv_add(1, 0, T0, 0, 0)); emit(add(A0, A0, T0));
    emit(pv_bne(1, 0, A2, l6 - here()));
    emit(sw(A0, S2, 4));
    // end
    li(T0, TOHOST); li(T1, 1); emit(sw(T1, T0, 0));
    emit(jal(0, 0));
  endtask

  // ---------------- monitors
  int cyc_p0 = 0, cyc_p1 [3], p1_rep = 0;
  int a_reads [3][$];
  int c_writes [$];
  int n_init = 0, n_adv = 0, n_perm_blk = 0, n_tail_blk = 0, n_wrap = 0, n_nested = 0;
  int n_md_stall = 0, n_lsu_wait = 0, n_redirect = 0, n_stale = 0, n_queued = 0;

  always_ff @(posedge clk) if (rst_n) begin
    if (dut.id_valid && dut.id_pc >= l0s && dut.id_pc < l0e) cyc_p0++;
    if (dut.id_valid && dut.id_pc >= l1s && dut.id_pc < l1e && p1_rep < 3) cyc_p1[p1_rep]++;
    if (dreq && dgnt && !dwe && daddr >= A && daddr < A + 4 * N1 && dut.id_pc >= l1s && dut.id_pc < l1e && p1_rep < 3)
      a_reads[p1_rep].push_back((int'(daddr) - A) / 4);
    if (dreq && dgnt && dwe && daddr >= RES && daddr < RES + 12) p1_rep++;
    if (dreq && dgnt && dwe && daddr >= C && daddr < C + 4 * N5) c_writes.push_back((int'(daddr) - C) / 4);
    if (dut.lig_init != 0) n_init++;
    if (dut.lig_adv != 0) n_adv++;
    if (dut.lig_active[0] && dut.g_lig[0].u_lig.sum >= {1'b0, dut.g_lig[0].u_lig.n_q} &&
        dut.lig_adv[0]) n_wrap++;
    if (dut.lig_adv[1] && dut.lig_active[0] && dut.g_lig[0].u_lig.i_q < dut.g_lig[0].u_lig.n_q) n_nested++;
    if (dut.md_en && !dut.md_valid) n_md_stall++;
    if (dut.lsu_en && !dut.lsu_done) n_lsu_wait++;
    if (dut.redirect) n_redirect++;
    if (dut.u_if.u_pf.instr_rvalid_i && (dut.u_if.u_pf.stale_q != 0 || dut.u_if.u_pf.flush_i)) n_stale++;
    if (dut.u_if.u_pf.cnt_q != 0) n_queued++;
    if (illegal) begin failures++; $display("illegal instruction at %h", dut.id_pc); end
  end

  int n_perm_g [3], n_tail_g [3];
  for (genvar n = 0; n < 3; n++) begin : g_mon
    always_ff @(posedge clk) if (rst_n && dut.lig_active[n] && dut.lig_adv[n] && dut.g_lig[n].u_lig.block_end) begin
      if (dut.g_lig[n].u_lig.permute_next) n_perm_g[n]++;
      else if (dut.g_lig[n].u_lig.i_q + 1 < dut.g_lig[n].u_lig.n_q) n_tail_g[n]++;
    end
  end

  function automatic bit is_perm(int q[$], int n);
    bit seen [int];
    if (q.size() != n) return 0;
    foreach (q[k]) begin
      if (q[k] < 0 || q[k] >= n) return 0;
      seen[q[k]] = 1;
    end
    return seen.num() == n;
  endfunction
  function automatic bit is_seq(int q[$]);
    foreach (q[k]) if (q[k] != k) return 0;
    return 1;
  endfunction

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int av [256], bv [256], a3v [256], b3v [256];
    longint e;
    int cyc;
    bit done;
    foreach (mem[k]) mem[k] = 32'h0;
    foreach (n_perm_g[k]) begin n_perm_g[k] = 0; n_tail_g[k] = 0; end
    foreach (cyc_p1[k]) cyc_p1[k] = 0;
    for (int k = 0; k < 256; k++) begin
      av[k] = $urandom_range(0, 2000) - 1000; bv[k] = $urandom_range(0, 2000) - 1000;
      a3v[k] = $urandom_range(0, 200) - 100;  b3v[k] = $urandom_range(0, 200) - 100;
      mem[(A >> 2) + k] = av[k]; mem[(BB >> 2) + k] = bv[k];
      mem[(A3 >> 2) + k] = a3v[k]; mem[(B3 >> 2) + k] = b3v[k];
    end
    build();
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0; done = 0;
    while (!done && cyc < 200000) begin
      @(posedge clk); cyc++;
      if (mem[TOHOST >> 2] == 1) done = 1;
    end
    chk("program finished", done);
    $display("program ran %0d cycles; sequential dot-product loop %0d cycles", cyc, cyc_p0);

    // P0 / P1 results
    e = 0; for (int k = 0; k < N0; k++) e += longint'(av[k]) * bv[k];
    chk("P0 dot product", mem[(RES >> 2) + 10] == 32'(e));
    for (int r = 0; r < 3; r++) begin
      chk($sformatf("P1 rep %0d dot product", r), mem[(RES >> 2) + r] == 32'(e));
      chk($sformatf("P1 rep %0d visits every element once", r), is_perm(a_reads[r], N1));
      chk($sformatf("P1 rep %0d cycles equal to standard loop (%0d vs %0d)", r, cyc_p1[r], cyc_p0),
          cyc_p1[r] == cyc_p0);
    end
    chk("P1 order is not sequential", !is_seq(a_reads[0]) && !is_seq(a_reads[1]) && !is_seq(a_reads[2]));
    chk("P1 orders differ between runs", a_reads[0] != a_reads[1] || a_reads[1] != a_reads[2]);
    // P2
    e = 0; for (int k = 0; k < N2; k++) e += longint'(av[3 * k + 1]) * bv[3 * k + 1];
    chk("P2 linear-index dot product", mem[(RES >> 2) + 3] == 32'(e));
    // P3
    e = 0; for (int k = 0; k < N3; k++) e += longint'(a3v[k * k + 1]) * b3v[k * k + 1];
    chk("P3 nonlinear-index dot product", mem[(RES >> 2) + 4] == 32'(e));
    chk("P3 pv.sub sum of 2*pi", mem[(RES >> 2) + 5] == 32'(N3 * (N3 - 1)));
    chk("P3 pv.slli sum of pi<<3", mem[(RES >> 2) + 6] == 32'(4 * N3 * (N3 - 1)));
    // P4
    e = 0;
    for (int i = 0; i < N4; i++) for (int j = 0; j < M4; j++) e += longint'(av[i]) * bv[j];
    chk("P4 nested loops", mem[(RES >> 2) + 7] == 32'(e));
    // P5
    chk("P5 stores every element once", is_perm(c_writes, N5));
    chk("P5 store order not sequential", !is_seq(c_writes));
    for (int k = 0; k < N5; k++) chk($sformatf("P5 relu %0d", k), mem[(C >> 2) + k] == ((av[k] > 0) ? av[k] : 0));
    // P6
    chk("P6 div", mem[(RES >> 2) + 8] == 32'(1000003 / 7));
    chk("P6 pv.initi loop", mem[(RES >> 2) + 9] == 32'(10));

    n_perm_blk = n_perm_g[0] + n_perm_g[1] + n_perm_g[2];
    n_tail_blk = n_tail_g[0] + n_tail_g[1] + n_tail_g[2];
    $display("LIG init %0d, advance %0d, permuted blocks %0d, unpermuted tail blocks %0d, wraps %0d, nested advances %0d",
             n_init, n_adv, n_perm_blk, n_tail_blk, n_wrap, n_nested);
    $display("mult/div stall cycles %0d, LSU wait cycles %0d, redirects %0d", n_md_stall, n_lsu_wait, n_redirect);
    $display("prefetch: wrong-path responses dropped %0d, cycles with words queued %0d", n_stale, n_queued);
    chk("LIG init seen", n_init > 0);
    chk("LIG advance seen", n_adv > 0);
    chk("permuted block seen", n_perm_blk > 0);
    chk("unpermuted tail block seen", n_tail_blk > 0);
    chk("index wrap seen", n_wrap > 0);
    chk("nested LIGs seen", n_nested > 0);
    chk("mult/div stall seen", n_md_stall > 0);
    chk("LSU wait seen", n_lsu_wait > 0);
    chk("redirect seen", n_redirect > 0);
    chk("wrong-path prefetch response dropped", n_stale > 0);
    chk("prefetch FIFO used", n_queued > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
