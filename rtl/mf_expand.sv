// mf_expand: converts a sign-magnitude minifloat into signed two's-complement
// fixed point with FRAC fraction bits. The conversion is exact: the fixed-point
// format is sized so that both the smallest subnormal and the largest finite
// value fit. Used wherever the predictors add, compare or accumulate minifloats:
// all arithmetic is done in fixed point and rounded once (see mf_round).
//
// Format: {sign, exponent[EXP_W], mantissa[MAN_W]}. Exponent 0 is subnormal
// (value 0.m * 2^(1-BIAS)); every other exponent is normal (1.m * 2^(e-BIAS)).
// There is no infinity or NaN. Purely combinational. The bit counts of the two
// formats come from the paper; this encoding and the fixed-point approach are
// this design's own.
module mf_expand #(
  parameter int unsigned EXP_W = 5,
  parameter int unsigned MAN_W = 2,
  parameter int unsigned BIAS  = 15,
  parameter int unsigned FRAC  = 16,
  parameter int unsigned OUT_W = 34
) (
  input  logic [EXP_W+MAN_W:0]    f,
  output logic signed [OUT_W-1:0] x
);
  // Shift that places the mantissa LSB of an exponent-1 number at its weight.
  localparam int SHIFT0 = int'(FRAC) - int'(BIAS) - int'(MAN_W) + 1;

  if (SHIFT0 < 0) begin : g_bad_frac
    $error("mf_expand: FRAC too small for the smallest subnormal");
  end
  if (int'(OUT_W) < SHIFT0 + (1 << EXP_W) + int'(MAN_W)) begin : g_bad_width
    $error("mf_expand: OUT_W too small for the largest value");
  end

  logic [EXP_W-1:0] e;
  logic [MAN_W:0]   sig;
  logic [OUT_W-1:0] mag;
  int unsigned      sh;

  always_comb begin
    e   = f[EXP_W+MAN_W-1:MAN_W];
    sig = {(e != '0), f[MAN_W-1:0]};
    sh  = ((e == '0) ? 0 : int'(e) - 1) + SHIFT0;
    mag = OUT_W'(sig) << sh;
    x   = f[EXP_W+MAN_W] ? -$signed(mag) : $signed(mag);
  end
endmodule
