// mf_round: rounds a signed two's-complement fixed-point number (FRAC fraction
// bits) to the nearest sign-magnitude minifloat, ties to even, saturating at the
// magnitude code MAX_CODE. This is the single rounding step of every Q-value and
// weight update: the update is computed exactly in fixed point, then rounded here.
//
// How: find the leading one of |x|, derive the biased exponent (clamped to 1 for
// subnormals), shift the significand down to MAN_W+1 bits, and round with the
// guard bit and a sticky OR of the bits below it. The magnitude code is
// (exponent-1)*2^MAN_W + significand, so a rounding carry moves into the
// exponent on its own and subnormals come out with exponent 0. A result whose
// magnitude rounds to 0 is returned as +0. sat flags a clamped result.
// Purely combinational. The formats themselves (bias, no inf/NaN, ties-to-even)
// are this design's choice; the paper gives only the bit counts.
module mf_round #(
  parameter int unsigned EXP_W    = 5,
  parameter int unsigned MAN_W    = 2,
  parameter int unsigned BIAS     = 15,
  parameter int unsigned FRAC     = 37,
  parameter int unsigned IN_W     = 56,
  parameter int unsigned MAX_CODE = (1 << (EXP_W + MAN_W)) - 1
) (
  input  logic signed [IN_W-1:0] x,
  output logic [EXP_W+MAN_W:0]   f,
  output logic                   sat
);
  localparam int SHIFT0 = int'(FRAC) - int'(BIAS) - int'(MAN_W) + 1;

  if (SHIFT0 < 0) begin : g_bad_frac
    $error("mf_round: FRAC too small for the smallest subnormal");
  end
  if (IN_W > 64) begin : g_bad_width
    $error("mf_round: IN_W above 64 is not supported");
  end

  logic [IN_W-1:0] mag, q, rest;
  int              p, e_eff, em1, sh;
  logic            guard, sticky;
  longint unsigned code;

  always_comb begin
    mag = x[IN_W-1] ? IN_W'(-x) : IN_W'(x);
    p   = -1;
    for (int i = 0; i < int'(IN_W); i++) begin
      if (mag[i]) p = i;
    end
    e_eff = p - int'(FRAC) + int'(BIAS);
    if (e_eff < 1) e_eff = 1;
    sh    = e_eff - 1 + SHIFT0;
    q     = mag >> sh;
    guard = (sh > 0) ? mag[sh-1] : 1'b0;
    rest  = (sh > 1) ? (mag & ((IN_W'(1) << (sh - 1)) - IN_W'(1))) : '0;
    sticky = (rest != '0);
    em1   = e_eff - 1;
    code  = (longint'(em1) << MAN_W) + longint'(q);
    if (guard && (sticky || q[0])) code = code + 1;
    sat = (code > longint'(MAX_CODE));
    if (sat) code = longint'(MAX_CODE);
    f = {(x[IN_W-1] && code != 0), code[EXP_W+MAN_W-1:0]};
  end
endmodule
