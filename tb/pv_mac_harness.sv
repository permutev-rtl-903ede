// pv_mac_harness: one PermuteV core with a one-cycle memory running the
// paper's side-channel workload, the multiply-accumulate dot product of
// Fig. 6 "type 1" (pv.init / pv.add / pv.bne), for each vector length in
// NS, RUNS times per length without resetting the core, so every run draws
// fresh random numbers. For every run it checks the sum, checks that the
// weight loads visit each index once, and counts how many weights were
// used in their original iteration (the paper expects about 1/N of them).
// Used by tb_permutev_mac.
module pv_mac_harness
  import pv_asm_pkg::*;
#(
  parameter int unsigned B    = 4,
  parameter int          RUNS = 40
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   hits [4],
  output int   nonseq_runs
);
  localparam int NSZ = 4;
  localparam int NS [NSZ] = '{16, 32, 48, 64};
  localparam int A = 'h1000, BB = 'h1400, RES = 'h2000, NTAB = 'h1800, TOHOST = 'h3FFC;
  localparam int T0 = 5, T1 = 6, S1 = 9, A0 = 10, A1 = 11, A2 = 12, A3R = 13, A4 = 14, A5 = 15,
                 S2 = 18, S5 = 21, S6 = 22;

  logic ireq, irvalid, dreq, drvalid, dwe, illegal;
  logic [31:0] iaddr, irdata, daddr, dwdata, drdata;
  logic [3:0] dbe;
  logic [31:0] mem [4096];

  permutev_core #(.B(B)) dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(32'h0),
    .instr_req_o(ireq), .instr_gnt_i(ireq), .instr_rvalid_i(irvalid),
    .instr_addr_o(iaddr), .instr_rdata_i(irdata),
    .data_req_o(dreq), .data_gnt_i(dreq), .data_rvalid_i(drvalid), .data_we_o(dwe),
    .data_be_o(dbe), .data_addr_o(daddr), .data_wdata_o(dwdata), .data_rdata_i(drdata),
    .debug_req_i(1'b0), .illegal_insn_o(illegal));

  always_ff @(posedge clk) begin
    irvalid <= ireq;
    irdata  <= mem[iaddr[13:2]];
    drvalid <= dreq;
    if (dreq) begin
      drdata <= mem[daddr[13:2]];
      if (dwe) for (int k = 0; k < 4; k++) if (dbe[k]) mem[daddr[13:2]][8*k +: 8] <= dwdata[8*k +: 8];
    end
  end

  int np;
  function automatic void emit(logic [31:0] w); mem[np] = w; np++; endfunction
  function automatic int here(); return np * 4; endfunction
  function automatic void li(int rd, int v);
    int lo, hi;
    lo = v & 'hFFF; if (lo >= 2048) lo -= 4096;
    hi = (v - lo) >>> 12;
    emit(lui(rd, hi)); emit(addi(rd, rd, lo));
  endfunction

  int av [64], bv [64];
  int order [$];
  int run_idx, size_idx;

  initial begin
    int szl, rep, lp;
    done = 0; checks = 0; failures = 0; nonseq_runs = 0;
    foreach (hits[k]) hits[k] = 0;
    foreach (mem[k]) mem[k] = '0;
    for (int k = 0; k < 64; k++) begin
      av[k] = $urandom_range(0, 255) - 128; bv[k] = $urandom_range(0, 255) - 128;
      mem[(A >> 2) + k] = av[k]; mem[(BB >> 2) + k] = bv[k];
    end
    for (int s = 0; s < NSZ; s++) mem[(NTAB >> 2) + s] = NS[s];
    np = 0;
    li(S2, RES); li(S5, NTAB); li(S6, NSZ);
    szl = here();
    emit(lw(A2, S5, 0)); li(S1, RUNS);
    rep = here();
    li(A5, A); li(A1, BB); li(A0, 0);
    emit(pv_init(1, A2));
    lp = here();
    emit(pv_add(1, 2, T0, A5, 0)); emit(pv_add(1, 2, T1, A1, 0));
    emit(lw(A4, T0, 0)); emit(lw(A3R, T1, 0)); emit(mul(A4, A4, A3R)); emit(add(A0, A0, A4));
    emit(pv_bne(1, 0, A2, lp - here()));
    emit(sw(A0, S2, 0)); emit(addi(S2, S2, 4)); emit(addi(S1, S1, -1));
    emit(bne(S1, 0, rep - here()));
    emit(addi(S5, S5, 4)); emit(addi(S6, S6, -1));
    emit(bne(S6, 0, szl - here()));
    li(T0, TOHOST); li(T1, 1); emit(sw(T1, T0, 0));
    emit(jal(0, 0));
    run_idx = 0; size_idx = 0;
  end

  // monitor: weight loads of the current run; a store of a result closes it
  always_ff @(posedge clk) if (rst_n && !done) begin
    if (illegal) failures <= failures + 1;
    if (dreq && !dwe && daddr >= A && daddr < A + 256) order.push_back((int'(daddr) - A) / 4);
    if (dreq && dwe && daddr >= RES && daddr < RES + 4 * NSZ * RUNS) begin
      automatic int n = NS[size_idx];
      automatic longint e = 0;
      automatic bit seen [int];
      automatic int h = 0;
      automatic bit seq = 1;
      for (int k = 0; k < n; k++) e += longint'(av[k]) * bv[k];
      foreach (order[k]) begin
        seen[order[k]] = 1;
        if (order[k] == k) h++; else seq = 0;
      end
      checks <= checks + 2;
      if (dwdata != 32'(e) || order.size() != n || seen.num() != n) failures <= failures + 1;
      hits[size_idx] <= hits[size_idx] + h;
      if (!seq) nonseq_runs <= nonseq_runs + 1;
      order.delete();
      if (run_idx == RUNS - 1) begin run_idx <= 0; size_idx <= size_idx + 1; end
      else run_idx <= run_idx + 1;
    end
    if (dreq && dwe && daddr == TOHOST) done <= 1;
  end
endmodule
