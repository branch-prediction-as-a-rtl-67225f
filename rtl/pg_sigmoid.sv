// pg_sigmoid: probability that the softmax policy would pick the other action,
// pi(a_bar|s), for PolGAg's learning step. With h(s,a) = theta^T x(s,a) and
// x(s,NT) = -x(s,T), the softmax gives pi(T|s) = sigmoid(2y), y = theta^T q(T),
// so pi(a_bar|s) = 1 - sigmoid(z) with z = 2y for a = T and z = -2y for a = NT.
// The sigmoid uses the PLAN piecewise-linear approximation (slopes 1/4, 1/8,
// 1/32 with breakpoints 1, 2.375 and 5; max error about 0.019), which needs only
// shifts and adds and is exact in fixed point here: y has 16 fraction bits and
// the output 21. The paper gives the policy and states that it is a sigmoid of
// the score; the approximation is this design's choice. Its Table 1 writes the
// policy as sigmoid(y) while the softmax it defines gives sigmoid(2y); this
// block follows the softmax definition. Combinational.
module pg_sigmoid
  import rlbp_pkg::*;
(
  input  logic signed [PG_Y_W-1:0] y,
  input  logic                     action,  // a: 1 = taken
  output logic [PG_P_W-1:0]        p_bar    // pi(a_bar|s), 21 fraction bits
);
  localparam longint unsigned ONE  = 64'd1 << PG_P_FRAC;   // 1.0
  localparam longint unsigned X1   = 64'd1 << PG_Y_FRAC;   // 1.0   at 16 fraction bits
  localparam longint unsigned X2   = 64'd155648;           // 2.375 at 16 fraction bits
  localparam longint unsigned X5   = 64'd327680;           // 5.0   at 16 fraction bits
  localparam longint unsigned C1   = 64'd1048576;          // 0.5     at 21 fraction bits
  localparam longint unsigned C2   = 64'd786432;           // 0.375   at 21 fraction bits
  localparam longint unsigned C3   = 64'd327680;           // 0.15625 at 21 fraction bits

  logic signed [PG_Y_W-1:0] s, s_abs;
  longint unsigned          x, tail;

  always_comb begin
    s = action ? y : -y;                  // z = 2s
    s_abs = (s < 0) ? -s : s;
    x = longint'(s_abs) << 1;             // |z| at 16 fraction bits
    // tail = 1 - sigmoid(|z|) at 21 fraction bits
    if (x >= X5)      tail = 0;
    else if (x >= X2) tail = C3 - x;          // 0.15625 - |z|/32
    else if (x >= X1) tail = C2 - (x << 2);   // 0.375   - |z|/8
    else              tail = C1 - (x << 3);   // 0.5     - |z|/4
    p_bar = PG_P_W'((s >= 0) ? tail : ONE - tail);
  end
endmodule
