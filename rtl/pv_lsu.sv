// pv_lsu: load/store unit. Drives the data bus with the req/gnt/rvalid
// handshake of the Ibex core the design extends: data_req_o is held with a
// stable word address, byte enables and write data until data_gnt_i; the
// access then completes when data_rvalid_i arrives (for stores too). done_o
// is high for the one cycle in which rvalid arrives; for a load rdata_o then
// holds the selected byte/half/word, sign- or zero-extended. Accesses are
// assumed naturally aligned (misaligned accesses are not split).
module pv_lsu
  import pv_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        we_i,
  input  ls_size_e    size_i,
  input  logic        unsigned_i,
  input  logic [31:0] addr_i,
  input  logic [31:0] wdata_i,
  output logic        done_o,
  output logic [31:0] rdata_o,
  output logic        data_req_o,
  input  logic        data_gnt_i,
  input  logic        data_rvalid_i,
  output logic        data_we_o,
  output logic [3:0]  data_be_o,
  output logic [31:0] data_addr_o,
  output logic [31:0] data_wdata_o,
  input  logic [31:0] data_rdata_i
);
  logic       wait_q;
  logic [1:0] off;
  logic [31:0] shifted;

  assign off = addr_i[1:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                           wait_q <= 1'b0;
    else if (!wait_q && en_i && data_gnt_i) wait_q <= 1'b1;
    else if (wait_q && data_rvalid_i)      wait_q <= 1'b0;
  end

  assign data_req_o   = en_i && !wait_q;
  assign data_we_o    = we_i;
  assign data_addr_o  = {addr_i[31:2], 2'b00};
  assign data_wdata_o = wdata_i << {off, 3'b000};

  always_comb begin
    unique case (size_i)
      LS_BYTE: data_be_o = 4'b0001 << off;
      LS_HALF: data_be_o = 4'b0011 << off;
      default: data_be_o = 4'b1111;
    endcase
  end

  assign done_o  = wait_q && data_rvalid_i;
  assign shifted = data_rdata_i >> {off, 3'b000};

  always_comb begin
    unique case (size_i)
      LS_BYTE: rdata_o = unsigned_i ? {24'b0, shifted[7:0]}  : {{24{shifted[7]}}, shifted[7:0]};
      LS_HALF: rdata_o = unsigned_i ? {16'b0, shifted[15:0]} : {{16{shifted[15]}}, shifted[15:0]};
      default: rdata_o = shifted;
    endcase
  end
endmodule
