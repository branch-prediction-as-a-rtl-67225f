// tb_pg_sigmoid: pi(a_bar|s) against the PLAN formula evaluated in real
// arithmetic (must match exactly) and against the true logistic function
// (must be within 0.02), for scores around every breakpoint, random scores and
// both actions; also checks the end points 1/2 at y = 0 and 0 or 1 far out.
module tb_pg_sigmoid;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [39:0] y;
  logic action;
  logic [21:0] p_bar;
  int checks = 0, failures = 0;

  pg_sigmoid dut (.y, .action, .p_bar);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint yv, bit a);
    real yr, got, e, tru, z;
    y = 40'(yv); action = a;
    #1;
    yr  = real'(yv) / 65536.0;
    got = real'(p_bar) / 2097152.0;
    e   = pbar_ref(yr, a);
    z   = a ? 2.0 * yr : -2.0 * yr;
    tru = 1.0 / (1.0 + $exp(z));
    checks++;
    if (got != e || (got - tru > 0.02) || (tru - got > 0.02)) begin
      failures++;
      if (failures < 10) $display("FAIL y=%g a=%0d got %g plan %g true %g", yr, a, got, e, tru);
    end
  endtask

  initial begin
    longint pts[8] = '{0, 32768, 65536, 77824, 81920, 163840, 163841, 1 << 30};
    foreach (pts[i]) begin
      for (int d = -2; d <= 2; d++) begin
        chk(pts[i] + d, 1); chk(pts[i] + d, 0); chk(-pts[i] + d, 1); chk(-pts[i] + d, 0);
      end
    end
    for (int t = 0; t < 20000; t++) begin
      longint v;
      v = longint'($urandom_range(0, 600000));
      if ($urandom_range(0, 1)) v = -v;
      chk(v, 1'($urandom_range(0, 1)));
    end
    // fixed points
    chk(0, 1);
    checks++;
    if (p_bar != 22'd1048576) begin failures++; $display("FAIL p_bar(0) = %0d", p_bar); end
    chk(longint'(1) << 24, 1);
    checks++;
    if (p_bar != 0) begin failures++; $display("FAIL p_bar(large, agree) = %0d", p_bar); end
    chk(longint'(1) << 24, 0);
    checks++;
    if (p_bar != 22'd2097152) begin failures++; $display("FAIL p_bar(large, disagree) = %0d", p_bar); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
