// tb_pg_wupdate: the PolGAg weight-row update against the REINFORCE rule
// evaluated in real arithmetic, w_i + (outcome ? +1 : -1) * q_i * 0.02 * p_bar
// (q_0 = 1, q_i = +/-1 from the history, 2*alpha = 1311/65536), each result
// rounded to the nearest float8; random rows, histories, probabilities and
// outcomes, plus saturation at the largest weight.
module tb_pg_wupdate;
  import tb_ref_pkg::*;
  localparam int HIST = 62;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [(HIST+1)*8-1:0] row, row_new;
  logic [HIST-1:0] hist;
  logic [21:0] p_bar;
  logic taken, sat;
  int checks = 0, failures = 0;

  pg_wupdate #(.HIST(HIST)) dut (.row, .hist, .p_bar, .taken, .row_new, .sat);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(int t);
    real c, d;
    int unsigned e;
    #1;
    c = (1311.0 / 65536.0) * (real'(p_bar) / 2097152.0);
    for (int i = 0; i <= HIST; i++) begin
      d = (i == 0) ? 1.0 : (hist[i-1] ? 1.0 : -1.0);
      if (!taken) d = -d;
      e = real_to_w(w_to_real(row[i*8 +: 8]) + d * c);
      checks++;
      if (row_new[i*8 +: 8] != 8'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d i=%0d w=%h c=%g got %h exp %h", t, i, row[i*8 +: 8], c,
                                    row_new[i*8 +: 8], e);
      end
    end
  endtask

  initial begin
    int moved = 0;
    for (int t = 0; t < 1500; t++) begin
      for (int i = 0; i <= HIST; i++)
        row[i*8 +: 8] = (t % 2 == 0) ? 8'($urandom_range(0, 255) & 8'hAF)   // small weights
                                     : 8'($urandom_range(0, 255));
      hist  = {$urandom, $urandom};
      p_bar = 22'($urandom_range(0, 2097152));
      taken = 1'($urandom_range(0, 1));
      check_row(t);
      if (row_new != row) moved++;
    end
    checks++;
    if (moved < 700) begin failures++; $display("FAIL only %0d rows changed", moved); end
    // saturation: all weights at +max, push up
    row = '0;
    for (int i = 0; i <= HIST; i++) row[i*8 +: 8] = 8'h7F;
    hist = '1; p_bar = 22'd2097152; taken = 1;
    check_row(9999);
    checks++;
    if (sat) begin failures++; $display("FAIL sat at max without overflow"); end
    // a weight just under the top that rounds up must not wrap
    for (int i = 0; i <= HIST; i++) row[i*8 +: 8] = 8'h7E;
    check_row(10000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
