// pv_multdiv: RV32M multiply/divide unit of the EX block.
// Multiplies (mul, mulh, mulhsu, mulhu) finish in the cycle they are
// requested: valid_o follows en_i. Divides and remainders use a restoring
// divider on the magnitudes, one quotient bit per cycle: valid_o rises 33
// cycles after en_i is first seen (1 setup + 32 iterations) and stays for
// one cycle. en_i must stay high until valid_o. Division by zero returns
// all ones (quotient) and the dividend (remainder); the signed overflow
// case -2^31 / -1 returns -2^31 and 0, as the RISC-V spec requires.
module pv_multdiv
  import pv_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  md_op_e      op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic        valid_o,
  output logic [31:0] result_o
);
  typedef enum logic [1:0] {S_IDLE, S_DIV, S_DONE} state_e;
  state_e      state_q;
  logic [5:0]  cnt_q;
  logic [31:0] quot_q, rem_q, dvsr_q;
  logic        neg_q_q, neg_r_q;
  logic        is_div, sgn;
  logic [63:0] prod;
  logic [32:0] trial;
  logic [31:0] rem_sh, mag_a, mag_b, q_fix, r_fix;

  assign is_div = (op_i == MD_DIV) || (op_i == MD_DIVU) || (op_i == MD_REM) || (op_i == MD_REMU);
  assign sgn    = (op_i == MD_DIV) || (op_i == MD_REM);
  assign mag_a  = (sgn && a_i[31]) ? -a_i : a_i;
  assign mag_b  = (sgn && b_i[31]) ? -b_i : b_i;

  always_comb begin
    unique case (op_i)
      MD_MULH:   prod = 64'($signed({a_i[31], a_i}) * $signed({b_i[31], b_i}));
      MD_MULHSU: prod = 64'($signed({a_i[31], a_i}) * $signed({1'b0, b_i}));
      default:   prod = {32'b0, a_i} * {32'b0, b_i};
    endcase
  end

  // One restoring-division step: shift the next dividend bit into the
  // partial remainder and subtract the divisor if it fits.
  assign rem_sh = {rem_q[30:0], quot_q[31]};
  assign trial  = {1'b0, rem_sh} - {1'b0, dvsr_q};

  assign q_fix = (dvsr_q == '0) ? '1 : (neg_q_q ? -quot_q : quot_q);
  assign r_fix = neg_r_q ? -rem_q : rem_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
      quot_q  <= '0;
      rem_q   <= '0;
      dvsr_q  <= '0;
      neg_q_q <= 1'b0;
      neg_r_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (en_i && is_div) begin
          state_q <= S_DIV;
          cnt_q   <= 6'd32;
          quot_q  <= mag_a;             // dividend bits shift out of the top
          rem_q   <= '0;
          dvsr_q  <= mag_b;
          neg_q_q <= sgn && (a_i[31] ^ b_i[31]);
          neg_r_q <= sgn && a_i[31];
        end
        S_DIV: begin
          if (!trial[32]) begin
            rem_q  <= trial[31:0];
            quot_q <= {quot_q[30:0], 1'b1};
          end else begin
            rem_q  <= rem_sh;
            quot_q <= {quot_q[30:0], 1'b0};
          end
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == 6'd1) state_q <= S_DONE;
        end
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    if (!is_div) begin
      valid_o  = en_i;
      result_o = (op_i == MD_MUL) ? prod[31:0] : prod[63:32];
    end else begin
      valid_o  = en_i && (state_q == S_DONE);
      result_o = ((op_i == MD_DIV) || (op_i == MD_DIVU)) ? q_fix : r_fix;
    end
  end
endmodule
