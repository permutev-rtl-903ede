// pv_regfile: RV32 integer register file, 32 x 32 bits, two combinational
// read ports and one write port written on the rising clock edge. x0 always
// reads zero and ignores writes. Registers reset to zero.
module pv_regfile (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [4:0]  raddr_a_i,
  output logic [31:0] rdata_a_o,
  input  logic [4:0]  raddr_b_i,
  output logic [31:0] rdata_b_o,
  input  logic        we_i,
  input  logic [4:0]  waddr_i,
  input  logic [31:0] wdata_i
);
  logic [31:1][31:0] regs;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                       regs <= '0;
    else if (we_i && waddr_i != 5'd0) regs[waddr_i] <= wdata_i;
  end

  assign rdata_a_o = (raddr_a_i == 5'd0) ? '0 : regs[raddr_a_i];
  assign rdata_b_o = (raddr_b_i == 5'd0) ? '0 : regs[raddr_b_i];
endmodule
