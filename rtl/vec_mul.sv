// vec_mul: element-wise product of a gate vector and a signed vector with
// re-quantisation, y[i] = requant(g[i] * v[i] >>> SHIFT).
//
// As in the paper, the element-wise multiplier is built like the matrix
// multiplier but without the summation: one multiplier per element computes
// all products in one cycle, and a second cycle re-quantises them to 8 bits
// (latency 2, one vector per cycle).
//
// g is an unsigned 8-bit gate (z, r or 1-z, in [0, 1] with H_FRAC fraction
// bits); v is signed 8 bit. SHIFT is the number of fraction bits dropped,
// normally the gate's H_FRAC so that y keeps v's format. Rounding is round
// half up with saturation (this design's choice).
module vec_mul
  import sser_pkg::*;
#(
  parameter int unsigned N     = D_OUT,
  parameter int unsigned SHIFT = H_FRAC
) (
  input  logic clk,
  input  u8_t  g [N],
  input  q8_t  v [N],
  output q8_t  y [N]
);

  typedef logic signed [2*DATA_W:0] prod_t;

  prod_t p_q [N];

  // Cycle 1: parallel products (gate zero-extended to a signed operand).
  always_ff @(posedge clk)
    for (int i = 0; i < N; i++)
      p_q[i] <= $signed({1'b0, g[i]}) * v[i];

  // Cycle 2: re-quantisation.
  always_ff @(posedge clk)
    for (int i = 0; i < N; i++)
      y[i] <= requant(longint'(p_q[i]), SHIFT);

endmodule
