// pv_operand: the datapath additions PermuteV places after the register
// file (the green adder and multiplexers of the paper's core diagram).
// For R/I-type pv instructions the first ALU/MULT-DIV operand becomes
//   Reg[rs1] + (Ln.pi << x)
// (Table I of the paper). For pv.beq/pv.bne the second compare operand
// becomes Ln.i << x, where Ln.i is the iteration count after this branch
// advances the LIG (so "pv.bne L1.0, a2" leaves the loop after N passes).
// Ln = 0 selects the plain register values. A value of Ln above NUM_LIG
// reads zero. Purely combinational.
module pv_operand #(
  parameter int unsigned NUM_LIG = 3,
  parameter int unsigned NW      = 16
) (
  input  logic [31:0]                 rs1_i,
  input  logic [31:0]                 rs2_i,
  input  logic [1:0]                  ln_i,
  input  logic [1:0]                  x_i,
  input  logic                        pv_branch_i,
  input  logic [NUM_LIG-1:0][NW-1:0]  pi_i,
  input  logic [NUM_LIG-1:0][NW-1:0]  i_next_i,
  output logic [31:0]                 opa_o,
  output logic [31:0]                 opb_o
);
  logic [31:0] pi_sel, i_sel, pi_shift, i_shift, sum;

  always_comb begin
    pi_sel = '0;
    i_sel  = '0;
    for (int n = 0; n < NUM_LIG; n++) begin
      if (ln_i == 2'(n + 1)) begin
        pi_sel = 32'(pi_i[n]);
        i_sel  = 32'(i_next_i[n]);
      end
    end
    pi_shift = pi_sel << x_i;
    i_shift  = i_sel << x_i;
    sum      = rs1_i + pi_shift;
    // Operand A: Reg[rs1] or the adder result.
    opa_o = (ln_i != 2'd0 && !pv_branch_i) ? sum : rs1_i;
    // Operand B: Reg[rs2] or the shifted iteration count.
    opb_o = (ln_i != 2'd0 && pv_branch_i) ? i_shift : rs2_i;
  end
endmodule
