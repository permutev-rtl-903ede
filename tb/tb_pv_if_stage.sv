// tb_pv_if_stage: the fetch stage against a memory whose words encode their
// own address, with a random response delay and a randomly stalling,
// randomly branching consumer. Every instruction handed to ID must come from
// the PC of the program flow (sequential, or the branch target after a
// redirect), its word must match that PC, and nothing fetched on the wrong
// path may reach ID. The bus may refuse grants at random: a refused request
// must stay up with the same address, also across a redirect (which must
// happen at least once), and no more than two requests may be outstanding. Also checks the rate of one instruction per
// cycle with a 1-cycle memory and an always-ready consumer, and the
// two-cycle gap after a taken branch.
module tb_pv_if_stage;
  int checks = 0, failures = 0, redirects = 0;
  logic clk = 0, rst_n = 0;
  logic req, gnt, rvalid, id_valid, id_ready, redir, redir_want;
  logic [31:0] addr, rdata, id_instr, id_pc, redir_pc;
  logic [31:0] q_addr [$];
  bit rand_lat, gnt_ok;
  int outstanding, max_out, held_flushes = 0;
  logic        prev_wait;
  logic [31:0] prev_addr;

  pv_if_stage dut (.clk_i(clk), .rst_ni(rst_n), .boot_addr_i(32'h100),
    .instr_req_o(req), .instr_addr_o(addr), .instr_gnt_i(gnt), .instr_rvalid_i(rvalid),
    .instr_rdata_i(rdata), .id_valid_o(id_valid), .id_instr_o(id_instr), .id_pc_o(id_pc),
    .id_ready_i(id_ready), .redirect_i(redir), .redirect_pc_i(redir_pc));

  always #5 clk = ~clk;
  assign gnt = req && gnt_ok;
  // as in the core, a redirect comes only with a consumed instruction
  assign redir = redir_want && id_valid && id_ready;

  // memory: word at address A is ~A; answers in the cycle after the grant,
  // or after a random extra delay once rand_lat is set
  int wait_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 0; wait_cnt <= 0; rdata <= 0;
    end else begin
      rvalid <= 0;
      if (req && gnt && !rand_lat) begin rvalid <= 1; rdata <= ~addr; end
      else if (req && gnt) begin q_addr.push_back(addr); wait_cnt <= $urandom_range(0, 3); end
      else if (q_addr.size() > 0) begin
        if (wait_cnt == 0) begin rvalid <= 1; rdata <= ~q_addr.pop_front(); end
        else wait_cnt <= wait_cnt - 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      outstanding <= outstanding + int'(req && gnt) - int'(rvalid);
      if (outstanding > max_out) max_out <= outstanding;
      // a refused request must stay up with the same address
      if (prev_wait) begin
        checks++;
        if (!req || addr != prev_addr) begin failures++; $display("request changed before grant"); end
      end
      if (redir && prev_wait) held_flushes++;
    end
    prev_wait <= rst_n && req && !gnt;
    prev_addr <= addr;
  end

  logic [31:0] exp_pc;
  int delivered;
  always_ff @(posedge clk) begin
    if (rst_n && id_valid && id_ready) begin
      checks++;
      if (id_pc !== exp_pc || id_instr !== ~id_pc) begin
        failures++; $display("got pc %h instr %h expected pc %h", id_pc, id_instr, exp_pc);
      end
      delivered++;
      exp_pc <= redir ? redir_pc : id_pc + 4;
      if (redir) redirects++;
    end
  end

  initial begin
    int t0;
    exp_pc = 32'h100; delivered = 0; rand_lat = 0; gnt_ok = 1; outstanding = 0; max_out = 0;
    id_ready = 1; redir_want = 0; redir_pc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // rate check: 20 sequential instructions, one per cycle
    wait (delivered == 1);
    t0 = $time;
    wait (delivered == 21);
    checks++;
    if (($time - t0) != 20 * 10) begin failures++; $display("rate: %0t", $time - t0); end
    // a taken branch: its target reaches ID two cycles later
    @(negedge clk);
    redir_want = 1; redir_pc = 32'h400;
    @(posedge clk); t0 = $time;
    @(negedge clk);
    redir_want = 0;
    wait (id_valid && id_pc == 32'h400);
    @(posedge clk);
    checks++;
    if (($time - t0) != 2 * 10) begin failures++; $display("branch gap: %0t", $time - t0); end
    rand_lat = 1;
    repeat (3000) begin
      @(negedge clk);
      id_ready = ($urandom_range(0, 3) != 0);
      redir_want = ($urandom_range(0, 4) == 0);
      redir_pc = {20'h0, 10'($urandom), 2'b00};
      gnt_ok = ($urandom_range(0, 3) != 0);
    end
    checks++;
    if (redirects < 50 || delivered < 500) failures++;
    checks++;
    if (max_out != 2) begin failures++; $display("max outstanding %0d", max_out); end
    checks++;
    if (held_flushes == 0) begin failures++; $display("no redirect while a request was held"); end
    $display("redirects %0d, of them while a refused request was held %0d", redirects, held_flushes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
