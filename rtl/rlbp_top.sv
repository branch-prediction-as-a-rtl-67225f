// rlbp_top: the two reinforcement-learning branch predictors, G-QLAg
// (tabular Q-learning, gshare-like) and PolGAg (policy gradient,
// perceptron-like), behind one branch-prediction interface with one shared,
// speculatively updated global history.
//
// Predict: with pred_valid high (and ready), both agents predict the branch at
// pred_pc in the same cycle; sel_pg chooses which agent's action becomes
// pred_taken, the direction the pipeline follows and the one shifted into the
// history. pred_ckpt captures everything needed later (PC, history, G-QLAg
// entry, both actions, the final prediction); the caller keeps it with the
// branch.
// Resolve: upd_valid with the saved checkpoint and the real outcome trains both
// agents, each with its own action and so its own reward. If the final
// prediction was wrong, `mispredict` is high and the history is rebuilt from
// the checkpoint plus the outcome at the next edge; the caller must then drop
// the younger in-flight branches (the paper notes that today's predictors
// discard what the wrong path would teach them; so does this design).
// One operation per cycle is expected; a repair in the same cycle as a
// prediction wins.
//
// The paper evaluates the two agents separately and does not combine them;
// hosting both with a selector, the shared history and the checkpoint format
// are this design's own choices.
module rlbp_top
  import rlbp_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     ready,
  input  logic                     sel_pg,
  // prediction
  input  logic                     pred_valid,
  input  logic [PC_W-1:0]          pred_pc,
  output logic                     pred_taken,
  output bp_ckpt_t                 pred_ckpt,
  output logic                     ql_tie,
  output logic signed [PG_Y_W-1:0] pg_score,
  // resolution
  input  logic                     upd_valid,
  input  bp_ckpt_t                 upd_ckpt,
  input  logic                     upd_taken,
  output logic                     mispredict,
  output logic                     pg_sat
);
  logic               ql_ready, pg_ready;
  logic [GHR_LEN-1:0] hist;
  logic [QL_IDX_W-1:0] ql_idx;
  logic               ql_pred, pg_pred;
  logic               do_pred, do_upd;

  assign ready   = ql_ready && pg_ready;
  assign do_pred = pred_valid && ready;
  assign do_upd  = upd_valid && ready;

  ghr #(.LEN(GHR_LEN)) u_ghr (
    .clk, .rst_n,
    .spec_valid(do_pred), .spec_taken(pred_taken),
    .repair_valid(do_upd && mispredict), .repair_ghr(upd_ckpt.ghr), .repair_taken(upd_taken),
    .hist
  );

  qlag_predictor u_ql (
    .clk, .rst_n, .ready(ql_ready),
    .pred_valid(do_pred), .pred_pc, .pred_ghr(hist),
    .pred_idx(ql_idx), .pred_taken(ql_pred), .pred_tie(ql_tie),
    .upd_valid(do_upd), .upd_idx(upd_ckpt.ql_idx), .upd_pred(upd_ckpt.ql_pred), .upd_taken
  );

  pg_predictor u_pg (
    .clk, .rst_n, .ready(pg_ready),
    .pred_pc, .pred_ghr(hist), .pred_taken(pg_pred), .pred_score(pg_score),
    .upd_valid(do_upd), .upd_pc(upd_ckpt.pc), .upd_ghr(upd_ckpt.ghr),
    .upd_pred(upd_ckpt.pg_pred), .upd_taken, .upd_sat(pg_sat)
  );

  always_comb begin
    pred_taken = sel_pg ? pg_pred : ql_pred;
    pred_ckpt  = '{pc: pred_pc, ghr: hist, ql_idx: ql_idx, ql_pred: ql_pred,
                   pg_pred: pg_pred, final_pred: pred_taken};
    mispredict = do_upd && (upd_ckpt.final_pred != upd_taken);
  end
endmodule
