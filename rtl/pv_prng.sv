// pv_prng: pseudo-random number generator feeding the Loop Index Generators.
// A 43-bit LFSR (x^43 + x^41 + x^20 + x + 1, Fibonacci form) runs beside a
// 37-bit cellular-automaton shift register (rule 90 in every cell except
// cell 28, which uses rule 150, null boundaries). Each cycle both advance and
// the output word is the XOR of 32 bits of each, as in the LFSR/CASR
// generator the paper cites. The paper uses a fixed seed for reproducibility;
// the seeds here are parameters (any non-zero values). The exact tap and
// output-bit selection of the generator the paper used is not given; the
// polynomial and CA rules are the ones of the cited LFSR/CASR design.
// Interface: rnd_o is valid every cycle after reset and changes every cycle.
module pv_prng #(
  parameter logic [42:0] LFSR_SEED = 43'h2AB_CDEF_1234,
  parameter logic [36:0] CASR_SEED = 37'h1B_5A5A_C3C3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  output logic [31:0] rnd_o
);
  logic [42:0] lfsr_q;
  logic [36:0] casr_q, casr_d;
  logic        fb;

  // Feedback of the Fibonacci LFSR for x^43 + x^41 + x^20 + x + 1.
  assign fb = lfsr_q[42] ^ lfsr_q[40] ^ lfsr_q[19] ^ lfsr_q[0];

  always_comb begin
    for (int k = 0; k < 37; k++) begin
      logic l, r;
      l = (k == 0)  ? 1'b0 : casr_q[k-1];
      r = (k == 36) ? 1'b0 : casr_q[k+1];
      casr_d[k] = (k == 28) ? (l ^ casr_q[k] ^ r) : (l ^ r);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lfsr_q <= LFSR_SEED;
      casr_q <= CASR_SEED;
    end else begin
      lfsr_q <= {lfsr_q[41:0], fb};
      casr_q <= casr_d;
    end
  end

  assign rnd_o = lfsr_q[31:0] ^ casr_q[31:0];
endmodule
