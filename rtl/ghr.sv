// ghr: global branch-history register. Bit 0 is the most recent branch
// (1 = taken). Each prediction shifts its predicted direction in speculatively,
// so the next prediction already sees it, as the paper describes for the RL
// "next state". When a branch resolves as mispredicted, the history is rebuilt
// from the snapshot taken when that branch was predicted, with the real outcome
// shifted in; a repair in the same cycle as a new prediction wins, because that
// prediction lies on the wrong path. Reset clears the history (all not-taken).
// Timing: the new history is visible the cycle after spec_valid or repair_valid.
module ghr #(
  parameter int unsigned LEN = 62
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           spec_valid,
  input  logic           spec_taken,
  input  logic           repair_valid,
  input  logic [LEN-1:0] repair_ghr,
  input  logic           repair_taken,
  output logic [LEN-1:0] hist
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            hist <= '0;
    else if (repair_valid) hist <= {repair_ghr[LEN-2:0], repair_taken};
    else if (spec_valid)   hist <= {hist[LEN-2:0], spec_taken};
  end
endmodule
