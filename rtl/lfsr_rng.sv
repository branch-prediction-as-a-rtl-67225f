// lfsr_rng: pseudo-random bit source. A 16-bit Galois LFSR (polynomial
// x^16 + x^14 + x^13 + x^11 + 1, maximal length 65535) advances by one step
// whenever `step` is high; `bit_o` is its low bit, which over a full period is
// 1 in 32768 of 65535 states. G-QLAg uses it to break ties between equal
// Q-values "at random with equal probability", as the paper asks; the LFSR is
// this design's choice of random source. Reset loads SEED (must be non-zero).
module lfsr_rng #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  output logic bit_o
);
  localparam logic [15:0] TAPS = 16'hB400;
  logic [15:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= SEED;
    else if (step) state <= (state >> 1) ^ (state[0] ? TAPS : 16'h0000);
  end

  assign bit_o = state[0];

  initial assert (SEED != 16'h0000) else $error("lfsr_rng: SEED must be non-zero");
endmodule
