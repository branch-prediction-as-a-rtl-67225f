// qlag_predictor: G-QLAg, the Global-History Q-Learning Agent. A gshare-like
// predictor whose table entries hold two Q-values, Q_T and Q_NT, instead of a
// saturating counter.
//
// Predict (combinational, same cycle): the entry at (PC xor GHR) mod ENTRIES is
// read; the prediction is taken if Q_T > Q_NT, not-taken if Q_T < Q_NT, and a
// pseudo-random bit when they are equal (pred_tie is then high). The random
// source advances on every prediction.
// Update (one cycle, read-modify-write): the caller returns the entry index and
// the action chosen at prediction time plus the real outcome; the reward is +1
// if they agree, -1 if not, and only the Q-value of the chosen action is moved
// by Q <- 0.8 Q + 0.2 r. The write lands at the next clock edge; a prediction in
// the same cycle still sees the old entry.
// Initialisation: after reset the table is cleared to Q = 0 one entry per cycle;
// `ready` rises after ENTRIES cycles and updates before that are ignored.
//
// From the paper: two 6-bit Q-values per entry, ranges [-1, 1], initial value 0,
// the comparison and random tie-break, the reward and the rule with alpha = 0.2,
// 64 KB of storage. This design's choices: the 6-bit float layout, the
// single-cycle asynchronous-read table (a real SRAM would want a pipelined read
// and a write-forwarding path), the clearing sequence and the LFSR.
module qlag_predictor
  import rlbp_pkg::*;
#(
  parameter int unsigned PC_W_P    = PC_W,
  parameter int unsigned GHR_LEN_P = GHR_LEN,
  parameter int unsigned HIST      = QL_HIST,
  parameter int unsigned ENTRIES   = QL_ENTRIES,
  parameter int unsigned IDX_W     = $clog2(ENTRIES),
  parameter int unsigned ALPHA_Q16 = QL_ALPHA_Q16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 ready,
  // prediction
  input  logic                 pred_valid,
  input  logic [PC_W_P-1:0]    pred_pc,
  input  logic [GHR_LEN_P-1:0] pred_ghr,
  output logic [IDX_W-1:0]     pred_idx,
  output logic                 pred_taken,
  output logic                 pred_tie,
  // update
  input  logic                 upd_valid,
  input  logic [IDX_W-1:0]     upd_idx,
  input  logic                 upd_pred,
  input  logic                 upd_taken
);
  localparam int unsigned CMP_FRAC = 8;
  localparam int unsigned CMP_W    = 14;

  typedef struct packed {
    logic [Q_W-1:0] qt;
    logic [Q_W-1:0] qnt;
  } qentry_t;

  qentry_t mem [ENTRIES];

  // ---------------- initialisation ----------------
  logic [IDX_W-1:0] init_idx;
  logic             init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_idx  <= '0;
      init_busy <= 1'b1;
    end else if (init_busy) begin
      if (init_idx == IDX_W'(ENTRIES - 1)) init_busy <= 1'b0;
      else                                 init_idx  <= init_idx + 1'b1;
    end
  end
  assign ready = !init_busy;

  // ---------------- prediction ----------------
  qentry_t               pe;
  logic signed [CMP_W-1:0] qt_x, qnt_x;
  logic                  rnd;

  qlag_index #(.PC_W(PC_W_P), .GHR_LEN(GHR_LEN_P), .HIST(HIST), .ENTRIES(ENTRIES), .IDX_W(IDX_W))
    u_idx (.pc(pred_pc), .ghr(pred_ghr), .idx(pred_idx));

  assign pe = mem[pred_idx];

  mf_expand #(.EXP_W(Q_EXP_W), .MAN_W(Q_MAN_W), .BIAS(Q_BIAS), .FRAC(CMP_FRAC), .OUT_W(CMP_W))
    u_xt (.f(pe.qt), .x(qt_x));
  mf_expand #(.EXP_W(Q_EXP_W), .MAN_W(Q_MAN_W), .BIAS(Q_BIAS), .FRAC(CMP_FRAC), .OUT_W(CMP_W))
    u_xnt (.f(pe.qnt), .x(qnt_x));

  lfsr_rng u_rng (.clk(clk), .rst_n(rst_n), .step(pred_valid), .bit_o(rnd));

  always_comb begin
    pred_tie   = (qt_x == qnt_x);
    pred_taken = pred_tie ? rnd : (qt_x > qnt_x);
  end

  // ---------------- update ----------------
  qentry_t        ue, ue_new;
  logic [Q_W-1:0] q_sel, q_upd;

  assign ue    = mem[upd_idx];
  assign q_sel = upd_pred ? ue.qt : ue.qnt;

  qlag_qupdate #(.ALPHA_Q16(ALPHA_Q16))
    u_upd (.q_old(q_sel), .correct(upd_pred == upd_taken), .q_new(q_upd));

  always_comb begin
    ue_new = ue;
    if (upd_pred) ue_new.qt  = q_upd;
    else          ue_new.qnt = q_upd;
  end

  always_ff @(posedge clk) begin
    if (init_busy)      mem[init_idx] <= '0;
    else if (upd_valid) mem[upd_idx]  <= ue_new;
  end

  always_ff @(posedge clk) begin
    if (upd_valid && !init_busy)
      assert (upd_idx < IDX_W'(ENTRIES)) else $error("qlag_predictor: update index out of range");
  end
endmodule
