// tb_pv_permute_unit: checks the Waksman permute unit.
// B = 4: all 32 control words give a permutation of 0..3, all 24
// permutations are reachable, and each output matches a hand-written model
// of the 5-switch network (input column, two middle switches, one output
// switch on the lower pair). B = 8: all 2^17 control words give a
// permutation and all 8! = 40320 permutations are reachable.
module tb_pv_permute_unit;
  int checks = 0, failures = 0;
  logic [4:0]       c4;
  logic [3:0][1:0]  p4;
  logic [16:0]      c8;
  logic [7:0][2:0]  p8;

  pv_permute_unit #(.B(4)) dut4 (.rnd_i(c4), .perm_o(p4));
  pv_permute_unit #(.B(8)) dut8 (.rnd_i(c8), .perm_o(p8));

  function automatic void sw(input bit s, inout int x, inout int y);
    int t;
    if (s) begin t = x; x = y; y = t; end
  endfunction

  initial begin
    bit seen4 [int];
    bit seen8 [int];
    for (int c = 0; c < 32; c++) begin
      int a0, a1, b0, b1, u0, u1, l0, l1, o[4], key;
      bit [3:0] used;
      c4 = 5'(c);
      #1;
      // model: input switches (bits 0,1), upper middle (2), lower middle (3),
      // output switch on pair 1 (4)
      a0 = 0; a1 = 1; b0 = 2; b1 = 3;
      sw(c[0], a0, a1); sw(c[1], b0, b1);
      u0 = a0; u1 = b0; l0 = a1; l1 = b1;
      sw(c[2], u0, u1); sw(c[3], l0, l1);
      o[0] = u0; o[1] = l0; o[2] = u1; o[3] = l1;
      sw(c[4], o[2], o[3]);
      used = '0; key = 0;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (int'(p4[k]) != o[k]) failures++;
        used[p4[k]] = 1'b1;
        key = key * 4 + int'(p4[k]);
      end
      checks++;
      if (used != 4'hF) failures++;
      seen4[key] = 1'b1;
    end
    checks++;
    if (seen4.num() != 24) begin failures++; $display("B=4 reachable %0d", seen4.num()); end

    for (int c = 0; c < (1 << 17); c++) begin
      bit [7:0] used;
      int key;
      c8 = 17'(c);
      #1;
      used = '0; key = 0;
      for (int k = 0; k < 8; k++) begin
        used[p8[k]] = 1'b1;
        key = key * 8 + int'(p8[k]);
      end
      checks++;
      if (used != 8'hFF) failures++;
      seen8[key] = 1'b1;
    end
    checks++;
    if (seen8.num() != 40320) begin failures++; $display("B=8 reachable %0d", seen8.num()); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
