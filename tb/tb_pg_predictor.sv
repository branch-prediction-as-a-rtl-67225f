// tb_pg_predictor: PolGAg against a reference model of its weight table (float8
// codes, score and update computed in real arithmetic). Runs with 16 rows and
// 8 history bits. Checks: `ready` rises exactly ROWS cycles after reset and an
// update before it is ignored; every prediction's score and direction match the
// model while random predictions and out-of-order-free updates are interleaved
// (the update path recomputes the score from the current weights); a predict
// and an update to the same row in one cycle see the old row; and a branch whose
// outcome copies the newest history bit is learned (at least 150 of 200 right, chance is 100).
module tb_pg_predictor;
  import tb_ref_pkg::*;
  localparam int ROWS = 16;
  localparam int HIST = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ready, pred_taken, upd_valid = 0, upd_pred = 0, upd_taken = 0, upd_sat;
  logic [63:0] pred_pc = '0, upd_pc = '0;
  logic [61:0] pred_ghr = '0, upd_ghr = '0;
  logic signed [39:0] pred_score;
  int checks = 0, failures = 0;

  pg_predictor #(.ROWS(ROWS), .HIST(HIST)) dut (.*);

  int unsigned refw [ROWS][HIST+1];

  function automatic real ref_score(int r, logic [61:0] g);
    real s;
    s = w_to_real(refw[r][0]);
    for (int i = 1; i <= HIST; i++) s += g[i-1] ? w_to_real(refw[r][i]) : -w_to_real(refw[r][i]);
    return s;
  endfunction

  task automatic ref_update(int r, logic [61:0] g, bit a, bit t);
    real pb, c, d;
    pb = pbar_ref(ref_score(r, g), a);
    c  = (1311.0 / 65536.0) * (real'(longint'(pb * 2097152.0)) / 2097152.0);
    for (int i = 0; i <= HIST; i++) begin
      d = (i == 0) ? 1.0 : (g[i-1] ? 1.0 : -1.0);
      if (!t) d = -d;
      refw[r][i] = real_to_w(w_to_real(refw[r][i]) + d * c);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [63:0] pc; logic [61:0] g; bit a; } rec_t;

  initial begin
    rec_t q [$];
    rec_t r;
    int cyc, same_row = 0, learned = 0, nonzero = 0;
    bit do_upd, outcome;
    real e;
    for (int i = 0; i < ROWS; i++) for (int j = 0; j <= HIST; j++) refw[i][j] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    upd_valid <= 1; upd_pc <= 64'd3; upd_ghr <= '1; upd_pred <= 1; upd_taken <= 1;
    @(posedge clk);
    upd_valid <= 0;
    #1;
    cyc = 1;
    while (!ready && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != ROWS) begin failures++; $display("FAIL ready after %0d cycles, expected %0d", cyc, ROWS); end

    for (int t = 0; t < 6000; t++) begin
      pred_pc  <= 64'($urandom_range(0, 63));
      pred_ghr <= {$urandom, $urandom};
      do_upd = (q.size() > 0) && ($urandom_range(0, 1) == 1);
      if (q.size() > 6) do_upd = 1;
      if (do_upd) begin
        r = q.pop_front();
        // outcome: taken for even PCs, else copies history bit 0 (learnable)
        outcome = (r.pc[0] == 0) ? 1'b1 : r.g[0];
        upd_valid <= 1; upd_pc <= r.pc; upd_ghr <= r.g; upd_pred <= r.a; upd_taken <= outcome;
      end else upd_valid <= 0;
      #1;
      e = ref_score(int'(pred_pc % ROWS), pred_ghr);
      checks++;
      if (real'(pred_score) / 65536.0 != e || pred_taken != (e >= 0.0)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d score %g exp %g pred %0d", t, real'(pred_score) / 65536.0, e, pred_taken);
      end
      if (e != 0.0) nonzero++;
      if (do_upd && (r.pc % ROWS) == (pred_pc % ROWS)) same_row++;
      q.push_back('{pc: pred_pc, g: pred_ghr, a: pred_taken});
      @(posedge clk);
      if (do_upd) ref_update(int'(r.pc % ROWS), r.g, r.a, outcome);
    end
    upd_valid <= 0;
    checks++;
    if (same_row == 0 || nonzero < 3000) begin
      failures++; $display("FAIL coverage same_row=%0d nonzero=%0d", same_row, nonzero);
    end
    // learned behaviour: odd PCs follow history bit 0, even PCs are taken
    for (int k = 0; k < 200; k++) begin
      pred_pc  <= 64'($urandom_range(0, 63));
      pred_ghr <= {$urandom, $urandom};
      #1;
      if (pred_taken == ((pred_pc[0] == 0) ? 1'b1 : pred_ghr[0])) learned++;
      @(posedge clk);
    end
    checks++;
    if (learned < 150) begin failures++; $display("FAIL learned %0d/200", learned); end
    $display("same_row=%0d learned=%0d/200", same_row, learned);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
