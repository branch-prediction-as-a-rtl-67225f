// tb_mf_round: checks fixed-point to minifloat rounding for the two formats the
// design uses (float8 1-5-2 from 37 fraction bits, and the 6-bit 1-3-2 Q-value
// from 24 fraction bits, clamped at 1.0) against a nearest-code search in real
// arithmetic: every code exactly, every midpoint between neighbouring codes
// (ties to even), values just off the midpoints, out-of-range values
// (saturation) and random values over the whole exponent range.
module tb_mf_round;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // float8 instance
  logic signed [56:0] x8;
  logic [7:0]         f8;
  logic               s8;
  mf_round #(.EXP_W(5), .MAN_W(2), .BIAS(15), .FRAC(37), .IN_W(57)) dut8 (.x(x8), .f(f8), .sat(s8));

  // 6-bit instance
  logic signed [33:0] x6;
  logic [5:0]         f6;
  logic               s6;
  mf_round #(.EXP_W(3), .MAN_W(2), .BIAS(7), .FRAC(24), .IN_W(34), .MAX_CODE(28)) dut6 (.x(x6), .f(f6), .sat(s6));

  task automatic chk8(longint v);
    int unsigned exp_code;
    real rv;
    x8 = 57'(v);
    #1;
    rv = real'(v) / pow2(37);
    exp_code = real_to_mf(rv, 5, 2, 15, 127);
    checks++;
    if (f8 != 8'(exp_code)) begin
      failures++;
      if (failures < 10) $display("FAIL f8 x=%0d (%g) got %h exp %h", v, rv, f8, exp_code);
    end
  endtask

  task automatic chk6(longint v);
    int unsigned exp_code;
    real rv;
    x6 = 34'(v);
    #1;
    rv = real'(v) / pow2(24);
    exp_code = real_to_mf(rv, 3, 2, 7, 28);
    checks++;
    if (f6 != 6'(exp_code)) begin
      failures++;
      if (failures < 10) $display("FAIL f6 x=%0d (%g) got %h exp %h", v, rv, f6, exp_code);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, lo, hi, mid;
    int sat_seen = 0;
    // float8: exact codes, midpoints and near-midpoints
    for (int c = 0; c < 127; c++) begin
      lo = longint'(mf_to_real(c, 5, 2, 15) * pow2(37));
      hi = longint'(mf_to_real(c + 1, 5, 2, 15) * pow2(37));
      mid = (lo + hi) / 2;
      chk8(lo); chk8(-lo); chk8(mid); chk8(-mid);
      // +/-1 LSB off a midpoint is only exact in double below 2^53
      if (mid < (longint'(1) << 52)) begin chk8(mid + 1); chk8(mid - 1); chk8(-(mid + 1)); end
    end
    // float8 saturation
    chk8(longint'(130000.0 * pow2(37)));
    if (s8) sat_seen++;
    chk8(-longint'(125000.0 * pow2(37)));
    if (s8) sat_seen++;
    // float8 random over the exponent range
    for (int i = 0; i < 4000; i++) begin
      int sh;
      sh = $urandom_range(0, 52);
      v = longint'({$urandom, $urandom}) & ((longint'(1) << sh) - 1);
      if ($urandom_range(0, 1) == 1) v = -v;
      chk8(v);
    end
    // 6-bit: exact codes, midpoints, near-midpoints up to 1.0
    for (int c = 0; c < 28; c++) begin
      lo = longint'(mf_to_real(c, 3, 2, 7) * pow2(24));
      hi = longint'(mf_to_real(c + 1, 3, 2, 7) * pow2(24));
      mid = (lo + hi) / 2;
      chk6(lo); chk6(-lo); chk6(mid); chk6(-mid); chk6(mid + 1); chk6(mid - 1); chk6(-(mid - 1));
    end
    chk6(longint'(1.0 * pow2(24))); chk6(-longint'(1.0 * pow2(24)));
    chk6(longint'(1.3 * pow2(24)));        // clamps to 1.0
    if (s6) sat_seen++;
    for (int i = 0; i < 4000; i++) begin
      int sh;
      sh = $urandom_range(0, 25);
      v = longint'($urandom) & ((longint'(1) << sh) - 1);
      if ($urandom_range(0, 1) == 1) v = -v;
      chk6(v);
    end
    checks++;
    if (sat_seen != 3) begin
      failures++;
      $display("FAIL saturation flag seen %0d of 3", sat_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
