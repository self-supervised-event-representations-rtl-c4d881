// one_minus: subtraction of a gate vector from the constant 1,
// y[i] = 1 - z[i], registered (latency 1, one vector per cycle).
//
// The paper lists "subtraction of a vector from the constant value 1" as one
// of the five operations of the GRU that get dedicated hardware; it produces
// the (1 - z_t) factor that weights the previous hidden state. Gates are
// unsigned with H_FRAC fraction bits, so 1.0 is ONE_Q (= 128) and both z and
// 1 - z lie in [0, ONE_Q]. A gate value above ONE_Q (which the sigmoid table
// never produces) is clamped so that the result stays non-negative.
module one_minus
  import sser_pkg::*;
#(
  parameter int unsigned N = D_OUT
) (
  input  logic clk,
  input  u8_t  z [N],
  output u8_t  y [N]
);

  always_ff @(posedge clk)
    for (int i = 0; i < N; i++)
      y[i] <= (z[i] >= u8_t'(ONE_Q)) ? '0 : u8_t'(ONE_Q) - z[i];

endmodule
