// tb_qlag_qupdate: exhaustive check of the G-QLAg learning step, all 64 Q codes
// times both rewards, against (1 - alpha) Q + alpha r computed in real
// arithmetic and rounded to the nearest 6-bit value; also checks that from 0 a
// run of rewards +1 climbs monotonically towards 1.0 and never leaves [-1, 1].
module tb_qlag_qupdate;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] q_old, q_new;
  logic correct;
  int checks = 0, failures = 0;

  qlag_qupdate dut (.q_old, .correct, .q_new);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned e;
    real prev, cur;
    for (int c = 0; c < 64; c++) begin
      for (int r = 0; r < 2; r++) begin
        q_old = 6'(c); correct = r[0];
        #1;
        e = q_update_ref(c, r[0], 13107);
        checks++;
        if (q_new != 6'(e)) begin
          failures++;
          $display("FAIL q=%h (%g) r=%0d got %h (%g) exp %h (%g)", c, mf_to_real(c, 3, 2, 7), r,
                   q_new, mf_to_real(q_new, 3, 2, 7), e, mf_to_real(e, 3, 2, 7));
        end
      end
    end
    // trajectory from 0 under constant reward +1
    q_old = 6'h00; correct = 1'b1; prev = 0.0;
    for (int k = 0; k < 30; k++) begin
      #1;
      cur = mf_to_real(q_new, 3, 2, 7);
      checks++;
      if (cur < prev || cur > 1.0) begin failures++; $display("FAIL trajectory %g after %g", cur, prev); end
      prev = cur;
      q_old = q_new;
    end
    checks++;
    if (prev < 0.75) begin failures++; $display("FAIL did not approach 1.0: %g", prev); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
