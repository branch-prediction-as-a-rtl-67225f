// tb_lfsr_rng: checks the tie-break random source by its properties rather than
// by re-implementing it: the state never sticks, the sequence repeats exactly
// after 65535 steps and not before (maximal length), the output bit is 1 in
// 32768 of those steps (fair coin over a period), and `step` low freezes it.
module tb_lfsr_rng;
  logic clk = 0, rst_n = 0, step = 0, b;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  lfsr_rng dut (.clk, .rst_n, .step, .bit_o(b));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] first;
    int ones, period, frozen_bad;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // reset value
    checks++;
    if (dut.state != 16'hACE1) begin failures++; $display("FAIL seed %h", dut.state); end
    first = dut.state;
    // hold: no change without step
    frozen_bad = 0;
    repeat (20) begin @(posedge clk); if (dut.state != first) frozen_bad++; end
    checks++;
    if (frozen_bad != 0) begin failures++; $display("FAIL state moved without step"); end
    // run one full period
    step <= 1;
    ones = 0;
    period = 0;
    do begin
      @(posedge clk);
      #1;
      period++;
      if (b) ones++;
      if (dut.state == 16'h0000) begin failures++; $display("FAIL lock-up state"); end
    end while (dut.state != first && period < 70000);
    checks++;
    if (period != 65535) begin failures++; $display("FAIL period %0d", period); end
    checks++;
    if (ones != 32768) begin failures++; $display("FAIL ones %0d of %0d", ones, period); end
    $display("period=%0d ones=%0d", period, ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
