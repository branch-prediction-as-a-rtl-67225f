// tb_qlag_predictor: G-QLAg against a reference model of its table (a table of
// Q_T/Q_NT codes updated with the real-arithmetic rule). Checks: `ready` rises
// exactly ENTRIES cycles after reset and updates before it are ignored; every
// prediction's index, tie flag and (outside ties) direction match the model;
// ties resolve both ways at roughly equal rates; a predict and an update in the
// same cycle see the old entry; and a branch with a fixed outcome is learned.
// Runs with a 1000-entry table (not a power of two, so the modulo matters).
module tb_qlag_predictor;
  import tb_ref_pkg::*;
  localparam int ENTRIES = 1000;
  localparam int IDX_W   = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ready, pred_valid = 0, pred_taken, pred_tie;
  logic [63:0] pred_pc = '0;
  logic [61:0] pred_ghr = '0;
  logic [IDX_W-1:0] pred_idx, upd_idx = '0;
  logic upd_valid = 0, upd_pred = 0, upd_taken = 0;
  int checks = 0, failures = 0;

  qlag_predictor #(.ENTRIES(ENTRIES)) dut (.*);

  int unsigned ref_qt [ENTRIES];
  int unsigned ref_qnt [ENTRIES];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int idx; bit pred; } rec_t;

  initial begin
    rec_t q [$];
    rec_t r;
    int cyc, ties = 0, tie_t = 0, same_cycle = 0, learned_ok;
    int e_idx;
    real qt, qnt;
    bit e_tie, e_pred, do_upd, outcome;
    for (int i = 0; i < ENTRIES; i++) begin ref_qt[i] = 0; ref_qnt[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // an update during initialisation must be ignored
    upd_valid <= 1; upd_idx <= 10'd5; upd_pred <= 1; upd_taken <= 1;
    cyc = 0;
    @(posedge clk);
    upd_valid <= 0;
    cyc = 1;
    #1;
    while (!ready && cyc < 5000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != ENTRIES) begin failures++; $display("FAIL ready after %0d cycles, expected %0d", cyc, ENTRIES); end

    for (int t = 0; t < 30000; t++) begin
      // choose this cycle's operations
      pred_valid <= 1;
      pred_pc    <= (t % 3 == 0) ? 64'h1_0000 + 64'($urandom_range(0, 7) * 4) : {$urandom, $urandom};
      pred_ghr   <= {$urandom, $urandom};
      do_upd = (q.size() > 0) && ($urandom_range(0, 1) == 1);
      if (q.size() > 20) do_upd = 1;
      if (do_upd) begin
        r = q.pop_front();
        outcome = $urandom_range(0, 3) != 0;  // mostly taken
        upd_valid <= 1; upd_idx <= IDX_W'(r.idx); upd_pred <= r.pred; upd_taken <= outcome;
      end else begin
        upd_valid <= 0;
      end
      #1;
      // reference prediction, made from the table before this cycle's update
      e_idx = int'((pred_pc ^ (64'(pred_ghr) & 64'hFFFF)) % 64'(ENTRIES));
      qt  = mf_to_real(ref_qt[e_idx], 3, 2, 7);
      qnt = mf_to_real(ref_qnt[e_idx], 3, 2, 7);
      e_tie = (qt == qnt);
      e_pred = qt > qnt;
      checks++;
      if (pred_idx != IDX_W'(e_idx) || pred_tie != e_tie || (!e_tie && pred_taken != e_pred)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d idx %0d/%0d tie %0d/%0d pred %0d/%0d", t, pred_idx, e_idx,
                                    pred_tie, e_tie, pred_taken, e_pred);
      end
      if (e_tie) begin ties++; if (pred_taken) tie_t++; end
      if (do_upd && r.idx == e_idx) same_cycle++;
      q.push_back('{idx: e_idx, pred: pred_taken});
      @(posedge clk);
      // apply the update to the model
      if (do_upd) begin
        if (r.pred) ref_qt[r.idx]  = q_update_ref(ref_qt[r.idx], r.pred == outcome, 13107);
        else        ref_qnt[r.idx] = q_update_ref(ref_qnt[r.idx], r.pred == outcome, 13107);
      end
    end
    pred_valid <= 0; upd_valid <= 0;
    // tie-break fairness
    checks++;
    if (ties < 1000 || tie_t * 10 < ties * 4 || tie_t * 10 > ties * 6) begin
      failures++; $display("FAIL tie-break: %0d of %0d ties taken", tie_t, ties);
    end
    checks++;
    if (same_cycle == 0) begin failures++; $display("FAIL no same-cycle predict/update seen"); end
    // learning: one branch, one history, always taken
    learned_ok = 0;
    for (int k = 0; k < 12; k++) begin
      pred_valid <= 1; pred_pc <= 64'hDEAD_BEE0; pred_ghr <= 62'h1234;
      #1;
      upd_valid <= 1; upd_idx <= pred_idx; upd_pred <= pred_taken; upd_taken <= 1;
      if (k >= 4 && pred_taken) learned_ok++;
      @(posedge clk);
      upd_valid <= 0;
      @(posedge clk);
    end
    pred_valid <= 0; upd_valid <= 0;
    checks++;
    if (learned_ok != 8) begin failures++; $display("FAIL always-taken branch learned %0d/8", learned_ok); end
    $display("ties=%0d taken=%0d same_cycle=%0d", ties, tie_t, same_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
