// tb_pv_controller: directed cases for the ID/EX sequencing: single-cycle
// completion, stalls on MULT/DIV and LSU until their done signals, taken and
// not-taken branches, jumps, writeback source selection, and the LIG init
// and advance strobes of pv.init and pv.bne.
module tb_pv_controller;
  import pv_pkg::*;
  import pv_asm_pkg::*;
  int checks = 0, failures = 0;
  logic valid, taken, mdv, lsd, ready, mden, lsuen, rfwe, redir, jalr, ill;
  logic [1:0] wbs;
  logic [2:0] linit, ladv;
  logic [31:0] instr;
  dec_t d;

  pv_decoder dec (.instr_i(instr), .dec_o(d));
  pv_controller #(.NUM_LIG(3)) dut (.id_valid_i(valid), .dec_i(d), .br_taken_i(taken),
    .md_valid_i(mdv), .lsu_done_i(lsd), .id_ready_o(ready), .md_en_o(mden), .lsu_en_o(lsuen),
    .rf_we_o(rfwe), .wb_sel_o(wbs), .redirect_o(redir), .redirect_jalr_o(jalr),
    .lig_init_o(linit), .lig_advance_o(ladv), .illegal_insn_o(ill));

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    valid = 1; taken = 0; mdv = 0; lsd = 0;
    instr = add(1, 2, 3); #1;
    chk("add", ready && rfwe && wbs == 0 && !redir && linit == 0 && ladv == 0);
    valid = 0; #1;
    chk("no valid", !ready && !rfwe);
    valid = 1;
    instr = div(1, 2, 3); #1;
    chk("div stall", !ready && mden && !rfwe);
    mdv = 1; #1;
    chk("div done", ready && rfwe && wbs == 1);
    mdv = 0;
    instr = lw(1, 2, 0); #1;
    chk("lw stall", !ready && lsuen && !mden);
    lsd = 1; #1;
    chk("lw done", ready && rfwe && wbs == 2);
    instr = sw(1, 2, 0); #1;
    chk("sw done", ready && !rfwe);
    lsd = 0;
    instr = bne(1, 2, 8); taken = 1; #1;
    chk("bne taken", ready && redir && !rfwe);
    taken = 0; #1;
    chk("bne not taken", ready && !redir);
    instr = jal(1, 16); #1;
    chk("jal", ready && redir && rfwe && wbs == 3 && !jalr);
    instr = i_type(4, 5'd2, 3'b000, 5'd1, 7'b1100111); #1;
    chk("jalr", ready && redir && jalr);
    instr = pv_init(2, 5); #1;
    chk("pv.init L2", ready && linit == 3'b010 && ladv == 0 && !rfwe);
    instr = pv_initi(3, 9); #1;
    chk("pv.initi L3", linit == 3'b100);
    instr = pv_bne(1, 0, 5, -8); taken = 1; #1;
    chk("pv.bne L1 taken", ready && redir && ladv == 3'b001 && linit == 0);
    taken = 0; #1;
    chk("pv.bne L1 exit", ready && !redir && ladv == 3'b001);
    instr = pv_beq(3, 1, 5, 8); #1;
    chk("pv.beq L3", ladv == 3'b100);
    valid = 0; #1;
    chk("pv.beq not valid", ladv == 0);
    valid = 1;
    instr = 32'h0000_0073; #1;
    chk("illegal", ready && ill && !rfwe && !redir);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
