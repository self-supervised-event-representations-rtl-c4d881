// vec_add: element-wise saturating addition of two signed 8-bit vectors,
// y[i] = sat(a[i] + b[i]), registered (latency 1, one vector per cycle).
//
// The paper uses a dedicated module for the vector additions of the GRU
// equations (W x + U h, and the final blend of the old state and the
// candidate). Saturation to the 8-bit range is this design's choice; both
// operands must share one fixed-point format.
module vec_add
  import sser_pkg::*;
#(
  parameter int unsigned N = D_OUT
) (
  input  logic clk,
  input  q8_t  a [N],
  input  q8_t  b [N],
  output q8_t  y [N]
);

  always_ff @(posedge clk)
    for (int i = 0; i < N; i++)
      y[i] <= sat_add(a[i], b[i]);

endmodule
