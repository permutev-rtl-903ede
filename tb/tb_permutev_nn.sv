// tb_permutev_nn: a fully connected neural-network layer with ReLU on the
// PermuteV core at its default parameters (three LIGs, B = 4):
//   out[j] = max(0, sum_i W[j][i] * x[i]),  j < M = 6, i < N = 1000
// The outer loop over output neurons runs on L1 (pv.mul for the row
// offset, pv.add for the output address) and the inner dot product on L2
// (pv.add for both load addresses). N = 1000 is the loop size the paper
// gives as typical of edge inference. Checks: every output, every weight
// read exactly once, each inner pass out of sequential order, and, for
// every pass, the block structure of the index sequence: block k of B
// iterations must cover exactly the indices offset+kB .. offset+kB+B-1
// (mod N), and the passes must not all start at the same offset. The
// number of weights used in their original iteration is reported: it is
// about N/B per pass whose random offset lands within B of 0, else near 0,
// so about 1/N of all uses on average over many passes.
module tb_permutev_nn;
  import pv_asm_pkg::*;
  localparam int M = 6, N = 1000, B = 4;
  localparam int X = 'h1000, W = 'h2000, OUT = 'h7F00, TOHOST = 'h7FFC;
  localparam int T0 = 5, T1 = 6, T2 = 7, T3 = 28, A0 = 10, A1 = 11, A2 = 12, A3R = 13, A4 = 14,
                 S2 = 18, S3 = 19, S4 = 20, S5 = 21;

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

  int np = 0;
  function automatic void emit(logic [31:0] w); mem[np] = w; np++; endfunction
  function automatic int here(); return np * 4; endfunction
  function automatic void li(int rd, int v);
    int lo, hi;
    lo = v & 'hFFF; if (lo >= 2048) lo -= 4096;
    hi = (v - lo) >>> 12;
    emit(lui(rd, hi)); emit(addi(rd, rd, lo));
  endfunction

  int xv [N], wv [M*N];
  int wreads [M*N];
  int pass [$];
  int passes = 0, hits = 0, seq_passes = 0, block_errs = 0, out_writes = 0;
  int offsets [$];

  // index sequence of one inner pass against the block rule
  function automatic int check_blocks(int q [$], output int o);
    int errs;
    bit found;
    errs = 0; o = 0; found = 0;
    for (int p = 0; p < B && !found; p++) begin
      automatic bit ok = 1;
      o = (q[0] - p + N) % N;
      for (int r = 0; r < B; r++) begin
        automatic bit in = 0;
        for (int s = 0; s < B; s++) if (q[s] == (o + r) % N) in = 1;
        if (!in) ok = 0;
      end
      found = ok;
    end
    if (!found) return 1;
    for (int k = 0; k < N / B; k++)
      for (int r = 0; r < B; r++) begin
        automatic bit in = 0;
        for (int s = 0; s < B; s++) if (q[k*B + s] == (o + k*B + r) % N) in = 1;
        if (!in) errs++;
      end
    return errs;
  endfunction

  always_ff @(posedge clk) if (rst_n) begin
    if (illegal) begin failures++; $display("illegal instruction at %h", dut.id_pc); end
    if (dreq && !dwe && daddr >= W && daddr < W + 4 * M * N) begin
      wreads[(int'(daddr) - W) / 4]++;
      pass.push_back(((int'(daddr) - W) / 4) % N);
    end
    if (dreq && dwe && daddr >= OUT && daddr < OUT + 4 * M) begin
      automatic bit seq = 1;
      out_writes++;
      foreach (pass[k]) begin
        if (pass[k] == k) hits++; else seq = 0;
      end
      if (seq) seq_passes++;
      if (pass.size() != N) begin failures++; $display("pass of %0d iterations", pass.size()); end
      else begin
        automatic int o;
        block_errs += check_blocks(pass, o);
        offsets.push_back(o);
      end
      passes++;
      pass.delete();
    end
  end

  initial begin
    int outer, inner, cyc;
    bit done;
    foreach (mem[k]) mem[k] = '0;
    foreach (wreads[k]) wreads[k] = 0;
    for (int i = 0; i < N; i++) begin xv[i] = $urandom_range(0, 255) - 128; mem[(X >> 2) + i] = xv[i]; end
    for (int k = 0; k < M * N; k++) begin wv[k] = $urandom_range(0, 255) - 128; mem[(W >> 2) + k] = wv[k]; end
    // program
    li(S2, OUT); li(S3, W); li(S4, X); li(S5, 4 * N); li(A1, M); li(A2, N);
    emit(pv_init(1, A1));
    outer = here();
    emit(pv_mul(1, 0, T2, 0, S5));          // t2 = pi_j * 4N
    emit(add(T2, T2, S3));                  // row base
    emit(addi(A0, 0, 0));
    emit(pv_init(2, A2));
    inner = here();
    emit(pv_add(2, 2, T0, T2, 0));          // &W[j][pi_i]
    emit(pv_add(2, 2, T1, S4, 0));          // &x[pi_i]
    emit(lw(A4, T0, 0)); emit(lw(A3R, T1, 0)); emit(mul(A4, A4, A3R)); emit(add(A0, A0, A4));
    emit(pv_bne(2, 0, A2, inner - here()));
    emit(blt(0, A0, 8));                    // ReLU
    emit(addi(A0, 0, 0));
    emit(pv_add(1, 2, T3, S2, 0));          // &out[pi_j]
    emit(sw(A0, T3, 0));
    emit(pv_bne(1, 0, A1, outer - here()));
    li(T0, TOHOST); li(T1, 1); emit(sw(T1, T0, 0));
    emit(jal(0, 0));

    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0; done = 0;
    while (!done && cyc < 150000) begin
      @(posedge clk); cyc++;
      if (dreq && dwe && daddr == TOHOST) done = 1;
    end
    repeat (2) @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("program did not finish"); end
    $display("layer ran %0d cycles", cyc);

    for (int j = 0; j < M; j++) begin
      automatic longint e = 0;
      for (int i = 0; i < N; i++) e += longint'(wv[j*N + i]) * xv[i];
      if (e < 0) e = 0;
      checks++;
      if (mem[(OUT >> 2) + j] != 32'(e)) begin
        failures++; $display("out[%0d] = %0d, expected %0d", j, $signed(mem[(OUT >> 2) + j]), e);
      end
    end
    begin
      automatic int bad = 0;
      foreach (wreads[k]) if (wreads[k] != 1) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("%0d weights not read exactly once", bad); end
    end
    checks += 3;
    if (passes != M || out_writes != M) begin failures++; $display("passes %0d", passes); end
    if (seq_passes != 0) begin failures++; $display("%0d sequential passes", seq_passes); end
    if (block_errs != 0) begin failures++; $display("block rule broken %0d times", block_errs); end
    $display("weights used in their original iteration: %0d of %0d (the long-run average is 1/N, here %0d)", hits, M * N, M);
    begin
      automatic int same = 0;
      foreach (offsets[k]) if (k > 0 && offsets[k] == offsets[0]) same++;
      $display("start offsets of the inner passes: %p", offsets);
      checks++;
      if (same == M - 1) begin failures++; $display("every pass starts at the same offset"); end
    end
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
