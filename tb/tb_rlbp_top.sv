// tb_rlbp_top: end-to-end test of the two-agent predictor at its full default
// size (43690-entry G-QLAg, 4096 x 63-weight PolGAg, 62-bit history).
//
// A small synthetic program of eight static branches runs in a loop; their
// outcomes follow fixed patterns (loop exit every 8th trip, always taken,
// alternating, every third, parity of two others, and one random branch). The
// testbench plays an in-order pipeline: it keeps up to DEPTH predicted branches
// in flight, resolves the oldest, and on a misprediction throws away the younger
// ones and refetches them, as a processor flushing its wrong path would.
// Every prediction is compared with a reference model of both agents and of
// the speculative history (index, tie flag, score, both directions, final
// direction, the history snapshot). The agent that steers (sel_pg) switches
// every 1500 branches. Counted mechanisms, each of which must occur: table
// clearing finishing after exactly 43690 cycles, G-QLAg ties resolved at random,
// predictions made on speculative history (older branch unresolved),
// misprediction repairs, flushes of younger branches, rewards of +1 and -1 for
// each agent, and both steering modes. Finally both agents must have learned
// the patterned branches.
module tb_rlbp_top;
  import rlbp_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBR   = 24000;   // dynamic branches resolved
  localparam int NPROG = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ready, sel_pg = 0, pred_valid = 0, pred_taken, ql_tie, upd_valid = 0, upd_taken = 0;
  logic mispredict, pg_sat;
  logic [PC_W-1:0] pred_pc = '0;
  bp_ckpt_t pred_ckpt, upd_ckpt;
  logic signed [PG_Y_W-1:0] pg_score;
  int checks = 0, failures = 0;

  rlbp_top dut (.*);

  // ---------------- reference model ----------------
  int unsigned rq_t [QL_ENTRIES];
  int unsigned rq_n [QL_ENTRIES];
  byte unsigned rw [PG_ROWS][PG_HIST+1];
  logic [GHR_LEN-1:0] r_ghr;

  function automatic real r_score(int row, logic [GHR_LEN-1:0] g);
    real s;
    s = w_to_real(rw[row][0]);
    for (int i = 1; i <= PG_HIST; i++) s += g[i-1] ? w_to_real(rw[row][i]) : -w_to_real(rw[row][i]);
    return s;
  endfunction

  task automatic r_pg_update(int row, logic [GHR_LEN-1:0] g, bit a, bit t);
    real pb, c, d;
    pb = pbar_ref(r_score(row, g), a);
    c  = (1311.0 / 65536.0) * pb;
    for (int i = 0; i <= PG_HIST; i++) begin
      d = (i == 0) ? 1.0 : (g[i-1] ? 1.0 : -1.0);
      if (!t) d = -d;
      rw[row][i] = 8'(real_to_w(w_to_real(rw[row][i]) + d * c));
    end
  endtask

  // ---------------- program ----------------
  bit outc [NBR + 64];
  function automatic logic [PC_W-1:0] pc_of(int n);
    return 64'h0040_1000 + 64'((n % NPROG) * 12);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int n; bp_ckpt_t ck; } fl_t;

  initial begin
    fl_t fl [$];
    fl_t o;
    int cyc, n_fetch, n_done, depth, k, it, e_idx, row;
    int c_tie = 0, c_spec = 0, c_repair = 0, c_flush = 0, c_sel0 = 0, c_sel1 = 0;
    int c_ql_pos = 0, c_ql_neg = 0, c_pg_pos = 0, c_pg_neg = 0;
    int tail_n = 0, tail_ql = 0, tail_pg = 0;
    real qt, qnt, sc;
    bit e_tie, e_ql, e_pg, e_fin, t;

    // outcomes of the dynamic branch stream
    for (int n = 0; n < NBR + 64; n++) begin
      k = n % NPROG; it = n / NPROG;
      case (k)
        0: outc[n] = (it % 8) != 7;
        1: outc[n] = 1'b1;
        2: outc[n] = it[0];
        3: outc[n] = (it % 3) == 0;
        4: outc[n] = 1'($urandom_range(0, 1));
        5: outc[n] = it[0] ^ ((it % 3) == 0);
        6: outc[n] = 1'b0;
        default: outc[n] = (it % 4) < 2;
      endcase
    end
    for (int i = 0; i < QL_ENTRIES; i++) begin rq_t[i] = 0; rq_n[i] = 0; end
    for (int i = 0; i < PG_ROWS; i++) for (int j = 0; j <= PG_HIST; j++) rw[i][j] = 0;
    r_ghr = '0;

    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    cyc = 1;
    while (!ready && cyc < 100000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != QL_ENTRIES) begin failures++; $display("FAIL ready after %0d cycles, expected %0d", cyc, QL_ENTRIES); end

    n_fetch = 0; n_done = 0;
    depth = 1;
    while (n_done < NBR) begin
      sel_pg <= ((n_done / 1500) % 2) == 1;
      if (fl.size() < depth && n_fetch < NBR + 32) begin
        // ---------- predict ----------
        pred_valid <= 1; pred_pc <= pc_of(n_fetch); upd_valid <= 0;
        #1;
        e_idx = int'((pred_pc ^ (64'(r_ghr) & 64'hFFFF)) % 64'(QL_ENTRIES));
        qt  = mf_to_real(rq_t[e_idx], 3, 2, 7);
        qnt = mf_to_real(rq_n[e_idx], 3, 2, 7);
        e_tie = (qt == qnt);
        e_ql  = e_tie ? pred_ckpt.ql_pred : (qt > qnt);
        row = int'(pred_pc % 64'(PG_ROWS));
        sc  = r_score(row, r_ghr);
        e_pg = (sc >= 0.0);
        e_fin = sel_pg ? e_pg : e_ql;
        checks++;
        if (pred_ckpt.ghr != r_ghr || pred_ckpt.ql_idx != QL_IDX_W'(e_idx) || ql_tie != e_tie ||
            pred_ckpt.ql_pred != e_ql || pred_ckpt.pg_pred != e_pg || pred_taken != e_fin ||
            pred_ckpt.final_pred != e_fin || pred_ckpt.pc != pred_pc || real'(pg_score) / 65536.0 != sc) begin
          failures++;
          if (failures < 10) $display("FAIL predict n=%0d ghr %h/%h idx %0d/%0d ql %0d/%0d pg %0d/%0d score %g/%g",
                                      n_fetch, pred_ckpt.ghr, r_ghr, pred_ckpt.ql_idx, e_idx,
                                      pred_ckpt.ql_pred, e_ql, pred_ckpt.pg_pred, e_pg,
                                      real'(pg_score) / 65536.0, sc);
        end
        if (e_tie) c_tie++;
        if (fl.size() > 0) c_spec++;
        if (sel_pg) c_sel1++; else c_sel0++;
        fl.push_back('{n: n_fetch, ck: pred_ckpt});
        r_ghr = {r_ghr[GHR_LEN-2:0], e_fin};
        n_fetch++;
        @(posedge clk);
      end else begin
        // ---------- resolve the oldest ----------
        o = fl.pop_front();
        t = outc[o.n];
        upd_valid <= 1; upd_ckpt <= o.ck; upd_taken <= t; pred_valid <= 0;
        #1;
        checks++;
        if (mispredict != (o.ck.final_pred != t)) begin failures++; $display("FAIL mispredict flag n=%0d", o.n); end
        if (o.ck.ql_pred == t) c_ql_pos++; else c_ql_neg++;
        if (o.ck.pg_pred == t) c_pg_pos++; else c_pg_neg++;
        if (n_done >= NBR - 4000 && (o.n % NPROG) != 4) begin
          tail_n++;
          if (o.ck.ql_pred == t) tail_ql++;
          if (o.ck.pg_pred == t) tail_pg++;
        end
        @(posedge clk);
        // model: train both agents, repair history and flush on a misprediction
        if (o.ck.ql_pred) rq_t[o.ck.ql_idx] = q_update_ref(rq_t[o.ck.ql_idx], o.ck.ql_pred == t, QL_ALPHA_Q16);
        else              rq_n[o.ck.ql_idx] = q_update_ref(rq_n[o.ck.ql_idx], o.ck.ql_pred == t, QL_ALPHA_Q16);
        r_pg_update(int'(o.ck.pc % 64'(PG_ROWS)), o.ck.ghr, o.ck.pg_pred, t);
        if (o.ck.final_pred != t) begin
          c_repair++;
          if (fl.size() > 0) c_flush++;
          r_ghr = {o.ck.ghr[GHR_LEN-2:0], t};
          fl.delete();
          n_fetch = o.n + 1;
        end
        n_done++;
        depth = $urandom_range(1, 4);
      end
    end
    pred_valid <= 0; upd_valid <= 0;
    // the register must equal the model after the last repair and predictions
    #1;
    checks++;
    if (dut.hist != r_ghr) begin failures++; $display("FAIL final history %h exp %h", dut.hist, r_ghr); end

    $display("ties=%0d spec=%0d repairs=%0d flushes=%0d sel_ql=%0d sel_pg=%0d", c_tie, c_spec, c_repair, c_flush, c_sel0, c_sel1);
    $display("ql +1/-1 = %0d/%0d  pg +1/-1 = %0d/%0d", c_ql_pos, c_ql_neg, c_pg_pos, c_pg_neg);
    $display("last 4000 (patterned): ql %0d/%0d pg %0d/%0d correct", tail_ql, tail_n, tail_pg, tail_n);
    checks++; if (c_tie == 0)    begin failures++; $display("FAIL no tie"); end
    checks++; if (c_spec == 0)   begin failures++; $display("FAIL no speculative prediction"); end
    checks++; if (c_repair == 0) begin failures++; $display("FAIL no repair"); end
    checks++; if (c_flush == 0)  begin failures++; $display("FAIL no flush"); end
    checks++; if (c_sel0 == 0 || c_sel1 == 0) begin failures++; $display("FAIL one steering mode unused"); end
    checks++; if (c_ql_pos == 0 || c_ql_neg == 0 || c_pg_pos == 0 || c_pg_neg == 0) begin failures++; $display("FAIL reward sign unused"); end
    checks++; if (tail_ql * 100 < tail_n * 90) begin failures++; $display("FAIL G-QLAg accuracy"); end
    checks++; if (tail_pg * 100 < tail_n * 80) begin failures++; $display("FAIL PolGAg accuracy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
