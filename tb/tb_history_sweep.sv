// tb_history_sweep: a small, synthetic counterpart of the history-length sweeps
// by which both agents are evaluated. Three G-QLAg instances (history 2, 8, 16)
// and three PolGAg instances (history 2, 12, 62), all at their full default
// table sizes, run the same branch stream, with the history updated by the real
// outcome right after each prediction, as a trace-driven simulator does.
// The stream is a loop of ten static branches: the first is random, the next
// eight are always taken, and the last repeats the first one's outcome. The last
// branch can only be predicted by a predictor that sees at least nine history
// bits. G-QLAg sees the stream above; PolGAg sees the same loop with random
// middle branches, so that its bias-like weights do not all move together.
// Checks: the short-history instances stay near chance on the last branch;
// G-QLAg with 16 bits learns it (>= 90 % in the second half); PolGAg with 12 and
// 62 bits does clearly better than with 2 (see the note at the checks); and the
// misprediction count does not grow with history length. It prints mispredictions per 1000
// branches for each instance.
module tb_history_sweep;
  import rlbp_pkg::*;

  localparam int LOOPS = 3000;
  localparam int NPOS  = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [PC_W-1:0]    pc = '0;
  logic [GHR_LEN-1:0] hist = '0, hist_p = '0;
  logic               upd_valid = 0, taken = 0, taken_p = 0;

  // ---------------- G-QLAg instances ----------------
  localparam int QH [3] = '{2, 8, 16};
  logic             q_ready [3], q_pred [3], q_tie [3];
  logic [QL_IDX_W-1:0] q_idx [3];
  logic [QL_IDX_W-1:0] q_uidx [3];
  logic             q_upred [3];

  for (genvar g = 0; g < 3; g++) begin : g_ql
    qlag_predictor #(.HIST(QH[g])) u_ql (
      .clk, .rst_n, .ready(q_ready[g]),
      .pred_valid(1'b1), .pred_pc(pc), .pred_ghr(hist),
      .pred_idx(q_idx[g]), .pred_taken(q_pred[g]), .pred_tie(q_tie[g]),
      .upd_valid, .upd_idx(q_uidx[g]), .upd_pred(q_upred[g]), .upd_taken(taken));
  end

  // ---------------- PolGAg instances ----------------
  localparam int PH [3] = '{2, 12, 62};
  logic p_ready [3], p_pred [3], p_upred [3], p_sat [3];
  logic signed [PG_Y_W-1:0] p_score [3];

  for (genvar g = 0; g < 3; g++) begin : g_pg
    pg_predictor #(.HIST(PH[g])) u_pg (
      .clk, .rst_n, .ready(p_ready[g]),
      .pred_pc(pc), .pred_ghr(hist_p), .pred_taken(p_pred[g]), .pred_score(p_score[g]),
      .upd_valid, .upd_pc(pc), .upd_ghr(hist_p), .upd_pred(p_upred[g]), .upd_taken(taken_p),
      .upd_sat(p_sat[g]));
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q_miss [3], p_miss [3], q_tgt [3], p_tgt [3];
    int n_tgt, n_all;
    bit r;
    foreach (q_miss[i]) begin q_miss[i] = 0; p_miss[i] = 0; q_tgt[i] = 0; p_tgt[i] = 0; end
    n_tgt = 0; n_all = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    while (!(q_ready[0] && q_ready[1] && q_ready[2] && p_ready[0] && p_ready[1] && p_ready[2]))
      @(posedge clk);
    #1;
    for (int l = 0; l < LOOPS; l++) begin
      for (int p = 0; p < NPOS; p++) begin
        // predict: the prediction-time values are held for the update below
        pc = 64'h0001_0000 + 64'(p * 8);
        upd_valid = 0;
        #1;
        if (p == 0) r = 1'($urandom_range(0, 1));
        taken   = (p == 0 || p == NPOS - 1) ? r : 1'b1;
        taken_p = (p == 0 || p == NPOS - 1) ? r : 1'($urandom_range(0, 1));
        for (int g = 0; g < 3; g++) begin
          q_uidx[g] = q_idx[g]; q_upred[g] = q_pred[g]; p_upred[g] = p_pred[g];
          if (l >= LOOPS / 2) begin
            if (q_pred[g] != taken) q_miss[g]++;
            if (p_pred[g] != taken_p) p_miss[g]++;
            if (p == NPOS - 1) begin
              if (q_pred[g] == taken) q_tgt[g]++;
              if (p_pred[g] == taken_p) p_tgt[g]++;
            end
          end
        end
        if (l >= LOOPS / 2) begin n_all++; if (p == NPOS - 1) n_tgt++; end
        // resolve at the next edge, then shift the real outcome into the history
        upd_valid = 1;
        @(posedge clk);
        #1;
        upd_valid = 0;
        hist   = {hist[GHR_LEN-2:0], taken};
        hist_p = {hist_p[GHR_LEN-2:0], taken_p};
      end
    end
    for (int g = 0; g < 3; g++) begin
      $display("G-QLAg history %2d: %4d mispredictions per 1000 branches, target branch %0d/%0d",
               QH[g], q_miss[g] * 1000 / n_all, q_tgt[g], n_tgt);
      $display("PolGAg history %2d: %4d mispredictions per 1000 branches, target branch %0d/%0d",
               PH[g], p_miss[g] * 1000 / n_all, p_tgt[g], n_tgt);
    end
    // short histories cannot see the correlated branch
    for (int g = 0; g < 2; g++) begin
      checks++;
      if (q_tgt[g] * 10 > n_tgt * 7) begin failures++; $display("FAIL G-QLAg h=%0d beat chance", QH[g]); end
    end
    checks++;
    if (p_tgt[0] * 10 > n_tgt * 7) begin failures++; $display("FAIL PolGAg h=%0d beat chance", PH[0]); end
    // long histories learn it
    checks++;
    if (q_tgt[2] * 10 < n_tgt * 9) begin failures++; $display("FAIL G-QLAg h=16 did not learn"); end
    // PolGAg learns the correlation only partly: with alpha = 0.01 and float8
    // round-to-nearest, a weight stops growing once a step falls below half a
    // float8 spacing (between 0.125 and 0.25 here), so the informative weight cannot
    // outgrow the noise of the random-history weights. It must still beat the
    // 2-bit instance clearly.
    checks++;
    if (p_tgt[1] * 10 < p_tgt[0] * 10 + n_tgt) begin failures++; $display("FAIL PolGAg h=12 did not learn"); end
    checks++;
    if (p_tgt[2] <= p_tgt[0]) begin failures++; $display("FAIL PolGAg h=62 did not learn"); end
    // mispredictions do not grow with history
    checks++;
    if (q_miss[2] > q_miss[0] || p_miss[1] > p_miss[0]) begin failures++; $display("FAIL longer history mispredicts more"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
