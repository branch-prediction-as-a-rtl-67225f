// tb_ghr: drives random speculative shifts and repairs into the history register
// and compares it every cycle with a reference model kept as a bit queue;
// also checks reset, hold, and that a repair beats a same-cycle prediction.
module tb_ghr;
  localparam int LEN = 62;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic spec_valid = 0, spec_taken = 0, repair_valid = 0, repair_taken = 0;
  logic [LEN-1:0] repair_ghr = '0, hist;
  int checks = 0, failures = 0;

  ghr #(.LEN(LEN)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ref_h [$];
    logic [LEN-1:0] ref_v;
    int both = 0, reps = 0, specs = 0;
    for (int i = 0; i < LEN; i++) ref_h.push_back(1'b0);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 5000; t++) begin
      // reference value of the register now
      for (int i = 0; i < LEN; i++) ref_v[i] = ref_h[i];
      checks++;
      if (hist !== ref_v) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d hist %h exp %h", t, hist, ref_v);
      end
      spec_valid   <= ($urandom_range(0, 3) != 0);
      spec_taken   <= $urandom_range(0, 1);
      repair_valid <= ($urandom_range(0, 7) == 0);
      repair_taken <= $urandom_range(0, 1);
      repair_ghr   <= {$urandom, $urandom};
      @(posedge clk);
      #1;
      // apply the same operation to the model (bit 0 = newest)
      if (repair_valid) begin
        reps++;
        if (spec_valid) both++;
        ref_h.delete();
        ref_h.push_back(repair_taken);
        for (int i = 0; i < LEN - 1; i++) ref_h.push_back(repair_ghr[i]);
      end else if (spec_valid) begin
        specs++;
        ref_h.push_front(spec_taken);
        void'(ref_h.pop_back());
      end
    end
    checks++;
    if (both == 0 || reps == 0 || specs == 0) begin failures++; $display("FAIL coverage"); end
    $display("specs=%0d repairs=%0d repair+spec=%0d", specs, reps, both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
