// pg_predictor: PolGAg, the Policy Gradient Agent. A perceptron-like predictor
// whose weights are trained by REINFORCE on a linear softmax policy instead of
// by the perceptron rule.
//
// Storage: ROWS rows of HIST+1 float8 weights (bias w_0, then one weight per
// history bit), selected by PC mod ROWS; all weights start at 0.
// Predict (combinational, same cycle, no request strobe needed): y = w_0 + sum w_i q_i for the row of the
// branch and the current history; the greedy action is taken when y >= 0
// (pi(T|s) >= 1/2). pred_score returns y (16 fraction bits).
// Update (one cycle, read-modify-write): the row of the resolved branch is read
// again and the score recomputed from the history saved at prediction time, so
// pi(a_bar|s) is evaluated with the current weights, as REINFORCE prescribes;
// the new row is written at the next clock edge. A prediction in the same cycle
// sees the old row.
// Initialisation: after reset the rows are cleared one per cycle; `ready` rises
// after ROWS cycles and updates before that are ignored.
//
// From the paper: the policy, the state (PC and l history bits), the update
// rule of Algorithm 1 with alpha = 0.01, float8 weights (1-5-2), zero initial
// weights. The paper's study gives every branch its own weights (unbounded
// storage); a finite, untagged, PC-indexed table of 4096 rows is this design's
// choice, as are the tie rule (y = 0 predicts taken), the sigmoid approximation
// and the second score unit on the update path.
module pg_predictor
  import rlbp_pkg::*;
#(
  parameter int unsigned PC_W_P        = PC_W,
  parameter int unsigned GHR_LEN_P     = GHR_LEN,
  parameter int unsigned HIST          = PG_HIST,
  parameter int unsigned ROWS          = PG_ROWS,
  parameter int unsigned TWO_ALPHA_Q16 = PG_TWO_ALPHA_Q16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     ready,
  // prediction
  input  logic [PC_W_P-1:0]        pred_pc,
  input  logic [GHR_LEN_P-1:0]     pred_ghr,
  output logic                     pred_taken,
  output logic signed [PG_Y_W-1:0] pred_score,
  // update
  input  logic                     upd_valid,
  input  logic [PC_W_P-1:0]        upd_pc,
  input  logic [GHR_LEN_P-1:0]     upd_ghr,
  input  logic                     upd_pred,
  input  logic                     upd_taken,
  output logic                     upd_sat
);
  localparam int unsigned ROW_W  = (HIST + 1) * W_W;
  localparam int unsigned RIDX_W = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [ROW_W-1:0] mem [ROWS];

  // ---------------- initialisation ----------------
  logic [RIDX_W-1:0] init_idx;
  logic              init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_idx  <= '0;
      init_busy <= 1'b1;
    end else if (init_busy) begin
      if (init_idx == RIDX_W'(ROWS - 1)) init_busy <= 1'b0;
      else                               init_idx  <= init_idx + 1'b1;
    end
  end
  assign ready = !init_busy;

  // ---------------- prediction ----------------
  logic [RIDX_W-1:0] p_row;
  logic [ROW_W-1:0]  prow;

  assign p_row = RIDX_W'(pred_pc % PC_W_P'(ROWS));
  assign prow  = mem[p_row];

  pg_dot #(.HIST(HIST)) u_pdot (.row(prow), .hist(pred_ghr[HIST-1:0]), .y(pred_score));

  assign pred_taken = (pred_score >= 0);

  // ---------------- update ----------------
  logic [RIDX_W-1:0]        u_row;
  logic [ROW_W-1:0]         urow, urow_new;
  logic signed [PG_Y_W-1:0] u_score;
  logic [PG_P_W-1:0]        p_bar;

  assign u_row = RIDX_W'(upd_pc % PC_W_P'(ROWS));
  assign urow  = mem[u_row];

  pg_dot #(.HIST(HIST)) u_udot (.row(urow), .hist(upd_ghr[HIST-1:0]), .y(u_score));

  pg_sigmoid u_sig (.y(u_score), .action(upd_pred), .p_bar(p_bar));

  pg_wupdate #(.HIST(HIST), .TWO_ALPHA_Q16(TWO_ALPHA_Q16))
    u_wup (.row(urow), .hist(upd_ghr[HIST-1:0]), .p_bar(p_bar), .taken(upd_taken),
           .row_new(urow_new), .sat(upd_sat));

  always_ff @(posedge clk) begin
    if (init_busy)      mem[init_idx] <= '0;
    else if (upd_valid) mem[u_row]    <= urow_new;
  end
endmodule
