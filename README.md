# Reinforcement-learning branch predictors in SystemVerilog

A branch predictor can be read as a reinforcement-learning agent. The state is
what the predictor sees: the branch address and the global history of recent
outcomes. The action is "taken" or "not taken". The reward is +1 for a correct
prediction and -1 for a wrong one. Read this way, a gshare-style table of
saturating counters is a tabular Q-learner, and a perceptron predictor is a
linear policy trained by gradient steps.

This repository gives RTL for the two predictors built on that reading:

* **G-QLAg** (global-history Q-learning agent). It is gshare with a different
  entry: each entry holds two small floating-point Q-values, one per action,
  instead of a 2-bit counter. It predicts the action with the larger Q-value.
  On resolution it moves only the Q-value of the chosen action toward the
  reward: `Q <- 0.8 Q + 0.2 r`.
* **PolGAg** (policy-gradient agent). It is perceptron-like: each branch has a
  row of float8 weights, one bias weight plus one weight per history bit. It
  predicts with the sign of the weighted sum of the history. It is trained by
  REINFORCE on a softmax policy instead of by the perceptron rule: every weight
  moves by `2·alpha·pi(other action)` toward agreeing with the outcome.

`rlbp_top` puts both agents behind one predict/resolve interface. They share
one global history register, which is updated speculatively and repaired after
a misprediction.

## Top-level view

```
             pred_pc ─┬──────────────────────────────┐
                      │                              │
          ┌───────────▼──────────┐        ┌──────────▼───────────┐
hist ────►│ qlag_predictor       │        │ pg_predictor         │◄──── hist
 (16 b)   │  qlag_index (hash)   │        │  4096 rows x 63 w    │  (62 b)
          │  43690 x {Q_T,Q_NT}  │        │  pg_dot   (predict)  │
          │  compare + lfsr tie  │        │  pg_dot   (update)   │
          │  qlag_qupdate        │        │  pg_sigmoid          │
          └───────────┬──────────┘        │  pg_wupdate          │
                      │ ql_pred           └──────────┬───────────┘
                      │                              │ pg_pred
                      └────────► sel_pg mux ◄────────┘
                                     │ pred_taken
                              ┌──────▼──────┐
                              │ ghr (62 b)  │ speculative shift / repair
                              └─────────────┘
```

| Quantity | Value | Where it comes from |
|---|---|---|
| G-QLAg entries | 43690 (64 KB / 12 bits) | paper: 64 KB budget, 12 bits per entry |
| Q-value | 6 bits: 1 sign, 3 exponent, 2 mantissa, bias 7, range [-1, 1] | paper: 6 bits, range [-1, 1]. The bit split and bias are this design's choice |
| G-QLAg learning rate | 0.2 (held as 13107/65536) | paper |
| G-QLAg history | 16 bits | the longest history in the paper's sweep (2 to 16) |
| PolGAg weight | float8: 1 sign, 5 exponent, 2 mantissa, bias 15, no inf/NaN | paper gives the bit split. The bias and the missing specials are this design's choice |
| PolGAg learning rate | alpha = 0.01, so 2·alpha = 1311/65536 | paper |
| PolGAg history | 62 bits, so a row holds 63 weights | the longest history in the paper's sweep (2 to 62) |
| PolGAg rows | 4096, untagged, indexed by PC mod 4096 | this design. The paper's study gives every branch its own weights |
| PC width | 64 | this design |

After synthesis (yosys, coarse) the top has about 8.3k word-level cells, 108
flip-flop bits and 2.59 Mbit of memory: 524,280 bits for G-QLAg plus 2,064,384
bits for PolGAg.

## Number formats and arithmetic

Both agents store small floating-point numbers but do no floating-point
arithmetic. Every operation works the same way:

1. Expand the stored minifloats exactly into two's-complement fixed point
   (`mf_expand`). The fixed-point width is chosen so that nothing is lost. For
   float8 the smallest subnormal is 2^-16 and the largest value is 1.75·2^16.
2. Compute the result exactly in fixed point.
3. Round once back to the storage format (`mf_round`): round to nearest, ties
   to even, saturating.

So each stored result is exactly the correctly rounded value of the ideal
update, given the quantised learning-rate constants. The testbenches check this
bit for bit against `real` arithmetic.

Minifloat encoding (`{s, e, m}`):

* For `e = 0` the value is `(-1)^s · 0.m · 2^(1-bias)` (a subnormal).
* Otherwise the value is `(-1)^s · 1.m · 2^(e-bias)`.
* The top exponent is an ordinary binade: there is no infinity or NaN.
* A result that rounds to zero is stored as +0.
* Q-values saturate at magnitude code 28, which is exactly 1.0. Weights
  saturate at 0x7F (114688).

`mf_round` finds the leading one. From it, it computes the biased exponent,
clamped to 1 for subnormals, and shifts the significand down to 3 bits. It
rounds with a guard bit and a sticky bit. It then forms the magnitude code as
`(exponent-1)·4 + significand`. Written this way, a rounding carry moves into
the exponent on its own, and subnormals need no special case.

## G-QLAg

**Index.** `(PC xor GHR[15:0]) mod 43690` (`qlag_index`). The modulo lets the
table use the full 64 KB budget, which is not a power of two of entries. The
PC is used unshifted.

**Predict.** The prediction is combinational and ready in the same cycle.

* If `Q_T > Q_NT`, predict taken. If `Q_T < Q_NT`, predict not-taken.
* If they are equal, the prediction comes from a 16-bit maximal-length LFSR
  (`lfsr_rng`), which advances on every prediction. `pred_tie` reports this
  case.
* Every entry starts with both Q-values at 0. So the first visit to any entry
  is a coin flip.

**Update.** The update is a single-cycle read-modify-write. The entry index and
the chosen action come back in the checkpoint. The reward is
`r = +1` if the action matches the outcome, and `r = -1` otherwise. Only the
chosen action's Q-value changes: `Q <- Q + 0.2(r - Q)` (`qlag_qupdate`). The
rule is a convex combination of values in [-1, 1], so Q-values stay in range.
This is the Q-learning rule with discount 0 and no exploration, the special
case that corresponds to a counter-based predictor.

**Reset.** After reset the table is cleared one entry per cycle. `ready`
rises after 43690 cycles.

## PolGAg

**Score.** The history is read as a vector `q` with entries in {+1, -1}:
taken is +1, not-taken is -1. With the bias term in front,
`q(T) = [1, q]` and `q(NT) = -q(T)`. The score is
`y = theta·q(T) = w_0 + sum_i (±w_i)`. `pg_dot` sums the 63 expanded weights
exactly; `y` has 16 fraction bits.

**Policy.** The policy is a softmax over the two actions with
`h(s,a) = theta·x(s,a)`. Because `x(s,NT) = -x(s,T)`, this reduces to
`pi(T|s) = sigmoid(2y)`.

* The greedy prediction is taken when `y >= 0`. The tie at `y = 0` goes to
  taken (this design's choice).
* The source text also writes the policy as `sigmoid(y)` in a summary table.
  The two forms predict the same direction and differ only in the update step
  size. This RTL follows the softmax derivation, which is where the factor 2 in
  the update comes from.

**Learning step.** REINFORCE for this policy gives
`theta += 2·alpha·r·pi(a_bar|s)·x(s,a)`, where `a_bar` is the action not
taken. The reward `r` is +1 exactly when the action equals the outcome. So
`r·x(s,a)` is `+q` for a taken outcome and `-q` for a not-taken one, and the
update does not depend on which action was predicted. The action only enters
through `pi(a_bar|s)`. The source's pseudocode listing writes the step with
`alpha` rather than `2·alpha`. This RTL follows the derivation in the text,
which has `2·alpha`. To get the listing's version instead, halve the constant
`PG_TWO_ALPHA_Q16` in `rlbp_pkg`.

Three blocks carry out the step:

* `pg_sigmoid` computes `pi(a_bar|s)` with the PLAN piecewise-linear sigmoid:
  slopes 1/4, 1/8 and 1/32, breakpoints 1, 2.375 and 5, worst error about
  0.019. It needs only shifts and subtractions, and is exact here: the input has
  16 fraction bits, the output 21.
* The step size is `c = 0.02·pi(a_bar|s)`, formed exactly.
* `pg_wupdate` adds `±c` to the bias weight and `±c·q_i` to each history
  weight, then rounds each weight to float8.

A confident correct prediction (`|2y| >= 5` in the right direction) gives
`c = 0`, so the row stops changing. A confidently wrong one gives the full step
of 0.02.

**Why the update path has its own score unit.** REINFORCE wants `pi(a_bar|s)`
under the current weights. Those weights may have changed since the branch was
predicted. So the update path re-reads the row and recomputes the score from
the history saved in the checkpoint. This uses a second `pg_dot`.

**Float8 and learning.** With round-to-nearest, a step of `c` changes a weight
only if `c` is larger than half the spacing between neighbouring float8 values
at that weight. The step size `c` is at most 0.02. So weights stop growing at
about 0.125 to 0.25 in magnitude, whatever the evidence.

* Strongly biased branches and correlations that a few weights can express are
  still learned. The end-to-end test reaches about 98 % on its patterned
  branches.
* A single informative history bit among many random ones is learned only
  partly. The informative weight cannot outgrow the bounded random walk of the
  other weights. `tb_history_sweep` shows this: one branch copies the outcome
  from nine branches back. PolGAg reaches about 74 % on it with 12 history bits
  and about 59 % with 62. G-QLAg with 16 bits reaches 100 %.

The source study reports float8 PolGAg close to its float32 variant on real
traces, and does not say how it rounds. Whether this limit applies there cannot
be checked without those traces. Stochastic rounding or a wider accumulator
would lift the limit, but both would be departures from the described
design.

**Reset.** Rows are cleared one per cycle (4096 cycles).

## Shared front end: history, checkpoint, repair

`rlbp_top` has two operations, predict and resolve. Drive at most one per
cycle. If both happen in one cycle, the history repair takes priority.

**Predict** (`pred_valid`, `pred_pc`).

* Both agents predict in the same cycle.
* `sel_pg` picks which agent drives `pred_taken`: 0 for G-QLAg, 1 for PolGAg.
  The chosen direction is shifted into the history at the next edge. This is
  the speculative history update: the next prediction already sees it.
* `pred_ckpt` (type `bp_ckpt_t`) holds the PC, the history used, the G-QLAg
  entry, both agents' actions and the final prediction. The pipeline stores it
  with the branch.

**Resolve** (`upd_valid`, `upd_ckpt`, `upd_taken`).

* Both agents learn from every resolved branch, each with its own action and
  its own reward. The agent that did not steer learns too.
* If the final prediction was wrong, `mispredict` is high in the same cycle.
  At the next edge the history becomes `{ckpt.ghr, outcome}`.
* After a misprediction the pipeline must discard its younger in-flight
  branches and fetch again. Nothing is learned from the wrong path.

The steering select, the shared history and the checkpoint layout belong to
this design, not to the source study, which evaluated each agent on its own.

## Departures and simplifications

* **Single-cycle tables.** Both tables are read asynchronously. Prediction is
  combinational, and updates are single-cycle read-modify-writes. A real SRAM
  implementation would pipeline the reads and forward in-flight writes.
* **Finite PolGAg storage.** The source study gave every branch its own
  weights. Here 4096 untagged rows can alias.
* **Learning-rate constants.** They are 16-bit fractions: 0.2 is held as
  0.19999695 and 0.02 as 0.02000427.
* **Design choices the source does not specify.** The G-QLAg hash, the
  minifloat biases, the rounding mode, the tie rule of PolGAg, the sigmoid
  approximation, the reset and clearing behaviour, the LFSR and the reset
  history (all not-taken).
* **Float8 rounding.** Round-to-nearest limits how far small PolGAg steps can
  grow a weight (see "Float8 and learning"). This may differ from the source
  study, which does not say how it rounds.
* **Not built.**
  * Learning from the wrong path (exploration). It is discussed only as an idea.
  * The float32 PolGAg variant.
  * The trace-driven evaluation environment.

## Files

`rtl/` holds one module or package per file.

* Package: `rlbp_pkg`.
* Arithmetic: `mf_expand`, `mf_round`.
* Shared logic: `lfsr_rng`, `ghr`.
* G-QLAg: `qlag_index`, `qlag_qupdate`, `qlag_predictor`.
* PolGAg: `pg_dot`, `pg_sigmoid`, `pg_wupdate`, `pg_predictor`.
* Top: `rlbp_top`.

Every block has a self-checking testbench `tb/tb_<block>.sv`.
`tb/tb_ref_pkg.sv` holds the reference arithmetic. It decodes minifloats to
`real`, computes in double precision and rounds by searching all codes for the
nearest one, so it shares no code with the RTL. Each testbench prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_mf_round` | every code, every midpoint (ties to even), ±1 LSB off midpoints, saturation, random values, in both formats |
| `tb_lfsr_rng` | period exactly 65535, 32768 ones per period, hold when not stepped |
| `tb_ghr` | 5000 random cycles against a queue model; repair wins over a same-cycle prediction |
| `tb_qlag_index` | against 64-bit `%` arithmetic |
| `tb_qlag_qupdate` | all 64 codes x both rewards; convergence toward 1.0 |
| `tb_qlag_predictor` | 1000-entry table against a model; clearing latency; ties 40–60 % taken; same-cycle predict/update; learning |
| `tb_pg_dot`, `tb_pg_sigmoid`, `tb_pg_wupdate` | bit-exact against the real-arithmetic formulas (the sigmoid also within 0.02 of the true logistic) |
| `tb_pg_predictor` | 16 rows x 8 history bits against a model; clearing latency; learning |
| `tb_rlbp_top` | see below |
| `tb_history_sweep` | three G-QLAg (history 2, 8, 16) and three PolGAg (history 2, 12, 62) instances at full table size on a synthetic stream, with immediate update as in a trace-driven simulator; prints mispredictions per 1000 branches and checks that only long enough histories learn a far correlation |

`tb_rlbp_top` runs the full default configuration end to end.

* **Program.** Eight static branches with loop, alternating, periodic, XOR and
  random outcome patterns.
* **Pipeline.** An in-order model keeps up to four branches in flight and
  flushes and refetches after each misprediction.
* **Checks.** Every prediction (history snapshot, index, tie, score, both
  actions) is compared with a model of both agents.
* **Steering.** The steering agent switches every 1500 branches.
* **Coverage.** Each of these must happen at least once: clearing, random
  ties, speculative predictions, repairs, flushes, both reward signs for both
  agents, and both steering modes.
* **Learning.** On the patterned branches, G-QLAg must reach 90 % accuracy and
  PolGAg 80 %. In a typical run both reach about 98 % over the last 4000
  branches.
* **Run time.** About one second after compilation.

Simulate any testbench with plain Verilator from the repository root, for
example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rlbp_pkg.sv tb/tb_ref_pkg.sv tb/tb_rlbp_top.sv --top-module tb_rlbp_top
./obj_dir/Vtb_rlbp_top
```

Sizes are parameters.

* `qlag_predictor`: `ENTRIES`, `HIST`, `ALPHA_Q16`.
* `pg_predictor`: `ROWS`, `HIST`, `TWO_ALPHA_Q16`.
* The package defaults in `rlbp_pkg` feed the top. To run other points of the
  history sweeps, change `QL_HIST` or `PG_HIST` there.
