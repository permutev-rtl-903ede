// tb_pv_lsu: byte, half and word loads and stores through the LSU into a
// small memory model that grants after a random delay and answers one
// cycle after the grant. Checks bus stability while waiting for the grant,
// byte enables, write data placement, load extension and done_o timing.
module tb_pv_lsu;
  import pv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en = 0, we = 0, uns = 0, done;
  ls_size_e size;
  logic [31:0] addr, wdata, rdata;
  logic req, gnt, rvalid, dwe;
  logic [3:0] be;
  logic [31:0] daddr, dwdata, drdata;
  logic [31:0] mem [16];
  logic [7:0]  model [64];

  pv_lsu dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .we_i(we), .size_i(size), .unsigned_i(uns),
    .addr_i(addr), .wdata_i(wdata), .done_o(done), .rdata_o(rdata),
    .data_req_o(req), .data_gnt_i(gnt), .data_rvalid_i(rvalid), .data_we_o(dwe), .data_be_o(be),
    .data_addr_o(daddr), .data_wdata_o(dwdata), .data_rdata_i(drdata));

  always #5 clk = ~clk;

  // memory model
  int delay_q;
  logic [31:0] held_addr;
  logic held;
  always_ff @(posedge clk) begin
    rvalid <= 1'b0;
    if (req && gnt) begin
      rvalid <= 1'b1;
      drdata <= mem[daddr[5:2]];
      if (dwe) for (int k = 0; k < 4; k++) if (be[k]) mem[daddr[5:2]][8*k +: 8] <= dwdata[8*k +: 8];
    end
  end
  always_ff @(posedge clk) begin
    if (req && !gnt) begin
      if (held && daddr != held_addr) failures++;
      held <= 1'b1; held_addr <= daddr;
    end else held <= 1'b0;
  end
  assign gnt = req && (delay_q == 0);
  always_ff @(posedge clk) delay_q <= (req && !gnt) ? delay_q - 1 : int'($urandom_range(0, 2));

  initial begin
    foreach (mem[k]) mem[k] = '0;
    foreach (model[k]) model[k] = '0;
    held = 0; rvalid = 0; drdata = 0; delay_q = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int a, sz, cyc;
      logic [31:0] e;
      sz = $urandom_range(0, 2);
      a  = $urandom_range(0, 63);
      a  = a & ~((1 << sz) - 1);
      @(negedge clk);
      size = ls_size_e'(sz); addr = 32'(a); we = 1'($urandom); uns = 1'($urandom); wdata = $urandom;
      en = 1; cyc = 0;
      #1;
      while (!done) begin @(negedge clk); cyc++; #1; if (cyc > 20) break; end
      checks++;
      if (!done || cyc < 1) failures++;
      if (we) begin
        for (int k = 0; k < (1 << sz); k++) model[a + k] = wdata[8*k +: 8];
      end else begin
        e = '0;
        for (int k = 0; k < (1 << sz); k++) e[8*k +: 8] = model[a + k];
        if (!uns && sz == 0) e = {{24{e[7]}}, e[7:0]};
        if (!uns && sz == 1) e = {{16{e[15]}}, e[15:0]};
        checks++;
        if (rdata !== e) begin failures++; $display("load a=%0d sz=%0d got %h exp %h", a, sz, rdata, e); end
      end
      @(negedge clk); en = 0;
    end
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
