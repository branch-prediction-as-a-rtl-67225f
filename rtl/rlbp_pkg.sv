// rlbp_pkg: sizes, number formats and the prediction checkpoint shared by the
// two reinforcement-learning branch predictors (G-QLAg and PolGAg) and their top.
//
// Numbers that follow the paper: 64 KB G-QLAg storage at 12 bits per entry
// (43690 entries), two 6-bit Q-values per entry, learning rate 0.2 for G-QLAg and
// 0.01 for PolGAg, float8 weights with 1 sign, 5 exponent and 2 mantissa bits,
// history lengths taken from the longest ones evaluated (16 for G-QLAg, 62 for
// PolGAg). Everything else (PC width, exponent biases, the 6-bit split, the number
// of PolGAg weight rows, fixed-point widths) is this design's own choice.
package rlbp_pkg;

  // Branch address width (CBP-5 style 64-bit PCs).
  localparam int unsigned PC_W = 64;

  // ---------------- G-QLAg ----------------
  localparam int unsigned QL_HIST      = 16;                    // GHR bits hashed in
  localparam int unsigned QL_ENTRIES   = (64 * 1024 * 8) / 12;  // 64 KB / 12 bit = 43690
  localparam int unsigned QL_IDX_W     = $clog2(QL_ENTRIES);
  // 6-bit Q-value: 1 sign, 3 exponent, 2 mantissa bits, bias 7, range [-1, 1].
  localparam int unsigned Q_EXP_W      = 3;
  localparam int unsigned Q_MAN_W      = 2;
  localparam int unsigned Q_BIAS       = 7;
  localparam int unsigned Q_W          = 1 + Q_EXP_W + Q_MAN_W;
  localparam int unsigned Q_ONE_CODE   = Q_BIAS << Q_MAN_W;     // magnitude code of 1.0
  localparam int unsigned QL_ALPHA_Q16 = 13107;                 // 0.2 in Q0.16

  // ---------------- PolGAg ----------------
  localparam int unsigned PG_HIST      = 62;                    // l, GHR bits used
  localparam int unsigned PG_ROWS      = 4096;                  // weight rows (PC indexed)
  // float8 weight: 1 sign, 5 exponent, 2 mantissa bits, bias 15, no inf/NaN.
  localparam int unsigned W_EXP_W      = 5;
  localparam int unsigned W_MAN_W      = 2;
  localparam int unsigned W_BIAS       = 15;
  localparam int unsigned W_W          = 1 + W_EXP_W + W_MAN_W;
  localparam int unsigned PG_TWO_ALPHA_Q16 = 1311;              // 2*alpha = 0.02 in Q0.16
  // Score y = theta^T q(T) in signed fixed point with 16 fraction bits.
  localparam int unsigned PG_Y_FRAC    = 16;
  localparam int unsigned PG_Y_W       = 40;
  // pi(a_bar|s) in unsigned fixed point with 21 fraction bits, range [0, 1].
  localparam int unsigned PG_P_FRAC    = 21;
  localparam int unsigned PG_P_W       = 22;

  // Shared global history: long enough for both agents.
  localparam int unsigned GHR_LEN = (PG_HIST > QL_HIST) ? PG_HIST : QL_HIST;

  // Everything the branch unit must hand back when the branch resolves.
  typedef struct packed {
    logic [PC_W-1:0]     pc;          // branch address
    logic [GHR_LEN-1:0]  ghr;         // history the prediction was made with
    logic [QL_IDX_W-1:0] ql_idx;      // G-QLAg table entry used
    logic                ql_pred;     // G-QLAg action (1 = taken)
    logic                pg_pred;     // PolGAg action (1 = taken)
    logic                final_pred;  // prediction given to the pipeline
  } bp_ckpt_t;

endpackage
