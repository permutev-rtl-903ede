// pv_if_stage: instruction fetch stage and IF/ID pipeline register.
// A pv_prefetch_buffer fetches 32-bit words over the Ibex-style
// req/gnt/rvalid instruction bus, up to two requests ahead, and the IF/ID
// register takes the next word from it whenever the register is empty or
// its instruction is being consumed by ID/EX this cycle (id_ready_i). With a
// memory that answers in the cycle after the grant, a stream of
// single-cycle instructions runs at one instruction per cycle.
// redirect_i (taken branch or jump in ID/EX) may only come with id_ready_i:
// the IF/ID register is then left empty, the prefetch buffer is flushed, its
// outstanding wrong-path requests are dropped, and fetching resumes at
// redirect_pc_i, so the branch target reaches ID two cycles after the branch.
// After reset fetching starts at boot_addr_i.
// The fetch stage of the paper's Ibex core also holds a compressed-
// instruction decoder; this stage handles 32-bit instructions only.
module pv_if_stage (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  // instruction bus
  output logic        instr_req_o,
  output logic [31:0] instr_addr_o,
  input  logic        instr_gnt_i,
  input  logic        instr_rvalid_i,
  input  logic [31:0] instr_rdata_i,
  // to ID/EX
  output logic        id_valid_o,
  output logic [31:0] id_instr_o,
  output logic [31:0] id_pc_o,
  input  logic        id_ready_i,
  input  logic        redirect_i,
  input  logic [31:0] redirect_pc_i
);
  logic        id_valid_q;
  logic [31:0] id_instr_q, id_pc_q;
  logic        pf_valid, pf_ready, consume;
  logic [31:0] pf_rdata, pf_pc;

  pv_prefetch_buffer u_pf (
    .clk_i, .rst_ni, .boot_addr_i,
    .instr_req_o, .instr_addr_o, .instr_gnt_i, .instr_rvalid_i, .instr_rdata_i,
    .flush_i   (redirect_i),
    .flush_pc_i(redirect_pc_i),
    .valid_o   (pf_valid),
    .rdata_o   (pf_rdata),
    .pc_o      (pf_pc),
    .ready_i   (pf_ready)
  );

  assign consume  = id_valid_q && id_ready_i;
  assign pf_ready = (!id_valid_q || consume) && !redirect_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      id_valid_q <= 1'b0;
      id_instr_q <= '0;
      id_pc_q    <= '0;
    end else if (pf_valid && pf_ready) begin
      id_valid_q <= 1'b1;
      id_instr_q <= pf_rdata;
      id_pc_q    <= pf_pc;
    end else if (consume) begin
      id_valid_q <= 1'b0;
    end
  end

  // A redirect always retires the instruction held in IF/ID.
  assert property (@(posedge clk_i) disable iff (!rst_ni) redirect_i |-> consume);

  assign id_valid_o = id_valid_q;
  assign id_instr_o = id_instr_q;
  assign id_pc_o    = id_pc_q;
endmodule
