// tb_pg_dot: PolGAg score against a real-arithmetic sum of the decoded float8
// weights, w_0 + sum(+/- w_i), for random rows (small, mixed and extreme
// magnitudes) and random histories; the fixed-point result must be exact.
module tb_pg_dot;
  import tb_ref_pkg::*;
  localparam int HIST = 62;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [(HIST+1)*8-1:0] row;
  logic [HIST-1:0] hist;
  logic signed [39:0] y;
  int checks = 0, failures = 0;

  pg_dot #(.HIST(HIST)) dut (.row, .hist, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e;
    int mode;
    for (int t = 0; t < 3000; t++) begin
      mode = t % 3;
      for (int i = 0; i <= HIST; i++) begin
        case (mode)
          0: row[i*8 +: 8] = 8'($urandom_range(0, 255) & 8'hBF);   // exponent <= 15
          1: row[i*8 +: 8] = 8'($urandom_range(0, 255));            // anything
          default: row[i*8 +: 8] = ($urandom_range(0, 1) ? 8'h7F : 8'hFF); // extremes
        endcase
      end
      hist = {$urandom, $urandom};
      #1;
      e = w_to_real(row[7:0]);
      for (int i = 1; i <= HIST; i++)
        e += hist[i-1] ? w_to_real(row[i*8 +: 8]) : -w_to_real(row[i*8 +: 8]);
      checks++;
      if (real'(y) / 65536.0 != e) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d y=%g exp %g", t, real'(y) / 65536.0, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
