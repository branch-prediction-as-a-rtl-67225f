// pg_dot: PolGAg score y = theta^T q(T) = w_0 + sum_{i=1..HIST} w_i * q_i, where
// w_0 is the bias weight and q_i = +1 if history bit i-1 is taken, -1 if not
// (the paper's GHR vector q in {+1,-1}^l with a leading constant 1). The float8
// weights are expanded exactly to fixed point (16 fraction bits) and summed
// exactly, so the result carries no rounding error. Combinational.
// The row layout (weight i in bits [8i+7:8i]) is this design's choice.
module pg_dot
  import rlbp_pkg::*;
#(
  parameter int unsigned HIST = PG_HIST
) (
  input  logic [(HIST+1)*W_W-1:0]  row,
  input  logic [HIST-1:0]          hist,
  output logic signed [PG_Y_W-1:0] y
);
  localparam int unsigned WX_W = 34;

  logic signed [WX_W-1:0] wx [HIST+1];

  for (genvar i = 0; i <= HIST; i++) begin : g_exp
    mf_expand #(.EXP_W(W_EXP_W), .MAN_W(W_MAN_W), .BIAS(W_BIAS), .FRAC(PG_Y_FRAC), .OUT_W(WX_W))
      u_exp (.f(row[i*W_W +: W_W]), .x(wx[i]));
  end

  always_comb begin
    y = PG_Y_W'(wx[0]);
    for (int i = 1; i <= int'(HIST); i++) begin
      if (hist[i-1]) y = y + PG_Y_W'(wx[i]);
      else           y = y - PG_Y_W'(wx[i]);
    end
  end
endmodule
