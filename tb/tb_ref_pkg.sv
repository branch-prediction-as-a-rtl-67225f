// tb_ref_pkg: reference arithmetic for the testbenches, written independently of
// the RTL: minifloats are decoded to `real`, results are computed in double
// precision (exact for the operand sizes used here) and rounded by searching all
// codes for the nearest one (ties to the even code). PLAN sigmoid and the two
// learning rules are restated from their definitions.
package tb_ref_pkg;

  // 2^n for any integer n
  function automatic real pow2(int n);
    real v = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) v = v * 2.0;
    else        for (int i = 0; i < -n; i++) v = v / 2.0;
    return v;
  endfunction

  // decode a sign-magnitude minifloat with ew exponent and mw mantissa bits
  function automatic real mf_to_real(int unsigned code, int ew, int mw, int bias);
    int unsigned e, m;
    real v;
    e = (code >> mw) & ((1 << ew) - 1);
    m = code & ((1 << mw) - 1);
    if (e == 0) v = (real'(m) / real'(1 << mw)) * pow2(1 - bias);
    else        v = (1.0 + real'(m) / real'(1 << mw)) * pow2(int'(e) - bias);
    if (((code >> (ew + mw)) & 1) != 0) v = -v;
    return v;
  endfunction

  // nearest code of magnitude <= maxcode, ties to even, +0 for a zero result
  function automatic int unsigned real_to_mf(real v, int ew, int mw, int bias, int unsigned maxcode);
    real a, best_d, d;
    int unsigned best;
    a = (v < 0.0) ? -v : v;
    best = 0;
    best_d = a;
    for (int unsigned c = 1; c <= maxcode; c++) begin
      d = mf_to_real(c, ew, mw, bias) - a;
      if (d < 0.0) d = -d;
      if (d < best_d || (d == best_d && (c % 2) == 0)) begin
        best = c;
        best_d = d;
      end
    end
    if (best != 0 && v < 0.0) best = best | (1 << (ew + mw));
    return best;
  endfunction

  // PLAN approximation of the logistic sigmoid, x >= 0
  function automatic real plan_sigmoid_pos(real x);
    if (x >= 5.0)        return 1.0;
    else if (x >= 2.375) return 0.03125 * x + 0.84375;
    else if (x >= 1.0)   return 0.125 * x + 0.625;
    else                 return 0.25 * x + 0.5;
  endfunction

  // pi(a_bar|s) for score y and action a: 1 - sigmoid(2y) for a = T, sigmoid(2y) for NT
  function automatic real pbar_ref(real y, bit a);
    real z, sp;
    z  = a ? 2.0 * y : -2.0 * y;
    sp = (z >= 0.0) ? plan_sigmoid_pos(z) : 1.0 - plan_sigmoid_pos(-z);
    return 1.0 - sp;
  endfunction

  // G-QLAg: Q <- (1-alpha) Q + alpha r on the 6-bit (1-3-2, bias 7) format
  function automatic int unsigned q_update_ref(int unsigned q, bit correct, int unsigned alpha_q16);
    real alpha, qv, r;
    alpha = real'(alpha_q16) / 65536.0;
    qv = mf_to_real(q, 3, 2, 7);
    r  = correct ? 1.0 : -1.0;
    return real_to_mf((1.0 - alpha) * qv + alpha * r, 3, 2, 7, 28);
  endfunction

  // float8 (1-5-2, bias 15) helpers, table driven for speed
  real w_tab [256];
  bit  w_tab_ok = 0;

  function automatic void w_tab_fill();
    for (int c = 0; c < 256; c++) w_tab[c] = mf_to_real(c, 5, 2, 15);
    w_tab_ok = 1;
  endfunction

  function automatic real w_to_real(int unsigned w);
    if (!w_tab_ok) w_tab_fill();
    return w_tab[w & 255];
  endfunction

  // nearest float8, ties to even, saturating; same rule as real_to_mf
  function automatic int unsigned real_to_w(real v);
    real a, best_d, d;
    int unsigned best;
    if (!w_tab_ok) w_tab_fill();
    a = (v < 0.0) ? -v : v;
    best = 0;
    best_d = a;
    for (int unsigned c = 1; c <= 127; c++) begin
      d = w_tab[c] - a;
      if (d < 0.0) d = -d;
      if (d < best_d || (d == best_d && (c % 2) == 0)) begin
        best = c;
        best_d = d;
      end
      if (w_tab[c] > a) break;   // codes increase with magnitude
    end
    if (best != 0 && v < 0.0) best = best | 128;
    return best;
  endfunction

endpackage
