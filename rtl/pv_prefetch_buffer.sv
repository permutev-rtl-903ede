// pv_prefetch_buffer: sequential instruction prefetcher in front of the
// IF/ID register, in the style of the Ibex prefetch buffer.
// It requests consecutive 32-bit words over the req/gnt/rvalid instruction
// bus with up to MAX_OUT requests outstanding and queues the returned words,
// each with its PC, in a DEPTH-entry FIFO. A request is only issued when the
// FIFO is sure to have room for its response (outstanding live requests +
// entries < DEPTH). The bus answers in order; a response that arrives while
// the FIFO is empty is passed straight to the output in the same cycle.
// flush_i (a taken branch or jump) empties the FIFO, marks every request
// still outstanding as stale, and sends the next request to flush_pc_i:
// in the flush cycle if a request slot is free, otherwise as soon as one is.
// Stale responses are counted off and dropped. A request that the bus has
// not yet granted is held with the same address until it is; if a flush
// comes meanwhile, the held request becomes stale and the flush target is
// requested after it. After reset fetching starts
// at boot_addr_i. With a memory that answers in the cycle after the grant,
// one word per cycle reaches the output.
// The paper's core shows a prefetch buffer in its fetch stage but does not
// describe it; MAX_OUT = 2 and the FIFO depth are this design's choice.
module pv_prefetch_buffer #(
  parameter int unsigned DEPTH   = 3,
  parameter int unsigned MAX_OUT = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  // instruction bus
  output logic        instr_req_o,
  output logic [31:0] instr_addr_o,
  input  logic        instr_gnt_i,
  input  logic        instr_rvalid_i,
  input  logic [31:0] instr_rdata_i,
  // redirect
  input  logic        flush_i,
  input  logic [31:0] flush_pc_i,
  // fetched words, in program order
  output logic        valid_o,
  output logic [31:0] rdata_o,
  output logic [31:0] pc_o,
  input  logic        ready_i
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned OW = $clog2(MAX_OUT + 1);

  logic                    started_q;
  logic [31:0]             fetch_pc_q, resp_pc_q;
  logic [OW-1:0]           out_q, stale_q;
  logic [CW-1:0]           cnt_q, cnt_d;
  logic [DEPTH-1:0][31:0]  data_q, data_d, pcs_q, pcs_d;
  logic                    issue, live_resp, push, pop, room;
  logic                    hold_q, hold_stale_q, stale_issue;
  logic [31:0]             hold_addr_q;

  // room for the response of a new request: after a flush the FIFO is empty
  // and every outstanding request is stale
  assign room = flush_i ? 1'b1
              : (32'(out_q) - 32'(stale_q) + 32'(cnt_q)) < DEPTH;

  assign instr_req_o  = started_q && (hold_q || ((out_q < OW'(MAX_OUT)) && room));
  assign instr_addr_o = hold_q ? hold_addr_q : flush_i ? flush_pc_i : fetch_pc_q;
  assign issue        = instr_req_o && instr_gnt_i;
  // a held request granted after a flush fetches from the old path
  assign stale_issue  = issue && hold_q && (hold_stale_q || flush_i);

  assign live_resp = instr_rvalid_i && (stale_q == '0);
  assign push      = live_resp && !flush_i;

  // head of the FIFO, or the response passing through an empty FIFO
  assign valid_o = !flush_i && ((cnt_q != '0) || live_resp);
  assign rdata_o = (cnt_q != '0) ? data_q[0] : instr_rdata_i;
  assign pc_o    = (cnt_q != '0) ? pcs_q[0]  : resp_pc_q;
  assign pop     = valid_o && ready_i;

  always_comb begin
    data_d = data_q;
    pcs_d  = pcs_q;
    cnt_d  = cnt_q;
    if (push) begin
      for (int k = 0; k < DEPTH; k++) begin
        if (CW'(k) == cnt_q) begin
          data_d[k] = instr_rdata_i;
          pcs_d[k]  = resp_pc_q;
        end
      end
      cnt_d = cnt_d + 1'b1;
    end
    if (pop) begin
      for (int k = 0; k < DEPTH - 1; k++) begin
        data_d[k] = data_d[k+1];
        pcs_d[k]  = pcs_d[k+1];
      end
      cnt_d = cnt_d - 1'b1;
    end
    if (flush_i) cnt_d = '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      started_q  <= 1'b0;
      fetch_pc_q <= '0;
      resp_pc_q  <= '0;
      out_q      <= '0;
      stale_q    <= '0;
      cnt_q      <= '0;
      data_q     <= '0;
      pcs_q      <= '0;
      hold_q       <= 1'b0;
      hold_stale_q <= 1'b0;
      hold_addr_q  <= '0;
    end else begin
      if (!started_q) begin
        started_q  <= 1'b1;
        fetch_pc_q <= boot_addr_i;
        resp_pc_q  <= boot_addr_i;
      end else begin
        if (flush_i)
          fetch_pc_q <= (issue && !hold_q) ? flush_pc_i + 32'd4 : flush_pc_i;
        else if (issue && !stale_issue)
          fetch_pc_q <= instr_addr_o + 32'd4;

        if (flush_i)   resp_pc_q <= flush_pc_i;
        else if (push) resp_pc_q <= resp_pc_q + 32'd4;
      end

      out_q <= out_q + OW'(issue) - OW'(instr_rvalid_i);

      if (flush_i)
        stale_q <= out_q - OW'(instr_rvalid_i) + OW'(stale_issue);
      else
        stale_q <= stale_q - OW'(instr_rvalid_i && stale_q != '0) + OW'(stale_issue);

      hold_q       <= instr_req_o && !instr_gnt_i;
      hold_addr_q  <= instr_addr_o;
      hold_stale_q <= hold_q && (hold_stale_q || flush_i);

      cnt_q  <= cnt_d;
      data_q <= data_d;
      pcs_q  <= pcs_d;
    end
  end

  // an ungranted request stays up with the same address
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    instr_req_o && !instr_gnt_i |=> instr_req_o && instr_addr_o == $past(instr_addr_o));
  // the bus never answers more requests than were issued
  assert property (@(posedge clk_i) disable iff (!rst_ni) instr_rvalid_i |-> out_q != '0);
  // a response is never pushed into a full FIFO
  assert property (@(posedge clk_i) disable iff (!rst_ni) push && !pop |-> cnt_q < CW'(DEPTH));
endmodule
