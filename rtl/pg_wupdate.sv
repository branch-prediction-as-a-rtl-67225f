// pg_wupdate: the PolGAg REINFORCE step for one weight row,
//   theta <- theta + 2 * alpha * r * pi(a_bar|s) * x(s,a).
// Since x(s,a) = +q for a = T and -q for a = NT, and r = +1 exactly when a equals
// the outcome, r * x(s,a) = (outcome ? +q : -q): every weight moves by
// c = 2*alpha*pi(a_bar|s) towards agreeing with the outcome, w_0 by +c or -c,
// w_i by +c or -c times q_i. c is formed exactly (2*alpha as a 16-bit fraction,
// 0.02 -> 1311/65536, times p_bar with 21 fraction bits), each weight is expanded
// exactly to 37 fraction bits, the sum is exact, and one round-to-nearest-even
// brings it back to float8, saturating at the largest finite value.
// Combinational. The paper gives the rule, alpha = 0.01 and the float8 format;
// the exact-then-round-once arithmetic is this design's choice. The paper's
// algorithm listing writes the step without the factor 2 while its derivation
// includes it; the derivation is followed here (TWO_ALPHA_Q16 = 655 gives the
// listing's form).
module pg_wupdate
  import rlbp_pkg::*;
#(
  parameter int unsigned HIST         = PG_HIST,
  parameter int unsigned TWO_ALPHA_Q16 = PG_TWO_ALPHA_Q16
) (
  input  logic [(HIST+1)*W_W-1:0] row,
  input  logic [HIST-1:0]         hist,
  input  logic [PG_P_W-1:0]       p_bar,
  input  logic                    taken,     // real outcome
  output logic [(HIST+1)*W_W-1:0] row_new,
  output logic                    sat        // some weight was clamped
);
  localparam int unsigned UFRAC = 16 + PG_P_FRAC;   // 37
  localparam int unsigned WX_W  = 55;
  localparam int unsigned SUM_W = 57;

  logic signed [SUM_W-1:0] c;
  logic [HIST:0]           sat_i;

  always_comb c = SUM_W'(p_bar) * SUM_W'(TWO_ALPHA_Q16);

  for (genvar i = 0; i <= HIST; i++) begin : g_w
    logic signed [WX_W-1:0]  wx;
    logic signed [SUM_W-1:0] sum;
    logic                    up;

    mf_expand #(.EXP_W(W_EXP_W), .MAN_W(W_MAN_W), .BIAS(W_BIAS), .FRAC(UFRAC), .OUT_W(WX_W))
      u_exp (.f(row[i*W_W +: W_W]), .x(wx));

    // bias weight follows the outcome; history weights follow outcome xnor q_i
    if (i == 0) begin : g_bias
      assign up = taken;
    end else begin : g_hist
      assign up = (taken == hist[i-1]);
    end

    assign sum = up ? SUM_W'(wx) + c : SUM_W'(wx) - c;

    mf_round #(.EXP_W(W_EXP_W), .MAN_W(W_MAN_W), .BIAS(W_BIAS), .FRAC(UFRAC), .IN_W(SUM_W))
      u_rnd (.x(sum), .f(row_new[i*W_W +: W_W]), .sat(sat_i[i]));
  end

  assign sat = |sat_i;
endmodule
