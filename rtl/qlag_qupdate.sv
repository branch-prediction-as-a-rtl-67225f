// qlag_qupdate: the G-QLAg learning step for one Q-value,
//   Q <- (1 - alpha) * Q + alpha * r,  r = +1 if the prediction was right, -1 if not,
// the Q-learning rule with gamma = 0 as the paper reduces it. The old Q-value is
// expanded exactly to fixed point (8 fraction bits), Q + alpha*(r - Q) is formed
// exactly with alpha as a 16-bit fraction (0.2 -> 13107/65536), and the result is
// rounded once to the 6-bit format, ties to even, clamped to [-1, 1].
// Combinational.
module qlag_qupdate
  import rlbp_pkg::*;
#(
  parameter int unsigned ALPHA_Q16 = QL_ALPHA_Q16
) (
  input  logic [Q_W-1:0] q_old,
  input  logic           correct,
  output logic [Q_W-1:0] q_new
);
  localparam int unsigned QFRAC = 8;           // exact for the 2^-8 subnormal step
  localparam int unsigned QX_W  = 14;
  localparam int unsigned SUM_W = 34;

  logic signed [QX_W-1:0]  qx;
  logic signed [QX_W:0]    diff;
  logic signed [SUM_W-1:0] sum;
  logic                    sat_unused;

  mf_expand #(.EXP_W(Q_EXP_W), .MAN_W(Q_MAN_W), .BIAS(Q_BIAS), .FRAC(QFRAC), .OUT_W(QX_W))
    u_exp (.f(q_old), .x(qx));

  always_comb begin
    // r - Q with r = +/-1.0 at 8 fraction bits
    diff = (correct ? (QX_W+1)'(1 << QFRAC) : -(QX_W+1)'(1 << QFRAC)) - (QX_W+1)'(qx);
    // Q (at 24 fraction bits) + alpha * (r - Q)
    sum  = (SUM_W'(qx) <<< 16) + SUM_W'(diff) * $signed({1'b0, 16'(ALPHA_Q16)});
  end

  mf_round #(.EXP_W(Q_EXP_W), .MAN_W(Q_MAN_W), .BIAS(Q_BIAS), .FRAC(QFRAC + 16),
             .IN_W(SUM_W), .MAX_CODE(Q_ONE_CODE))
    u_rnd (.x(sum), .f(q_new), .sat(sat_unused));
endmodule
