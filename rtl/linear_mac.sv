// linear_mac: fully parallel matrix-vector multiplier with bias and
// re-quantisation, y = requant(W * x + b).
//
// This is the unit that computes the linear layers of the recurrent cell. As
// in the paper, the weight matrices of all gates (W_z, W_r, W_h, or U_z, U_r,
// U_h) are merged into one unit with N_OUT = 3 * d_out outputs whose result is
// later split into the three gate slices. Every product has its own
// multiplier, so a whole matrix-vector product and its summation finish in one
// clock cycle; a second cycle re-quantises the wide sums to 8 bits.
//
// Interface: x holds N_IN signed inputs of IN_W bits with IN_FRAC fraction
// bits; w holds N_OUT x N_IN signed 8-bit weights with W_FRAC fraction bits;
// b holds N_OUT signed 8-bit biases in the output format (OUT_FRAC fraction
// bits). y is valid two cycles after x, w and b are presented (latency 2,
// one new vector accepted every cycle). There is no handshake: the enclosing
// pipeline carries the valid bit.
//
// From the paper: the merged 3*d_out structure, one cycle for multiply+sum
// and one for re-quantisation. This design's choice: the number formats and
// the rounding (round half up, saturate to 8 bits, see sser_pkg::requant).
module linear_mac
  import sser_pkg::*;
#(
  parameter int unsigned N_OUT    = 3 * D_OUT,
  parameter int unsigned N_IN     = D_OUT,
  parameter int unsigned IN_W     = DATA_W,
  parameter int unsigned IN_FRAC  = H_FRAC,
  parameter int unsigned OUT_FRAC = A_FRAC
) (
  input  logic                   clk,
  input  logic signed [IN_W-1:0] x [N_IN],
  input  q8_t                    w [N_OUT][N_IN],
  input  q8_t                    b [N_OUT],
  output q8_t                    y [N_OUT]
);

  // Sum of N_IN products of DATA_W x IN_W bits plus an aligned bias.
  localparam int unsigned ACC_FRAC = W_FRAC + IN_FRAC;
  localparam int unsigned SHIFT    = ACC_FRAC - OUT_FRAC;
  localparam int unsigned ACC_W    = DATA_W + IN_W + $clog2(N_IN + 1) + 1;

  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t acc_d [N_OUT];
  acc_t acc_q [N_OUT];

  // Cycle 1: all N_OUT x N_IN products and their sums in parallel.
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      acc_d[o] = acc_t'(b[o]) <<< SHIFT;
      for (int i = 0; i < N_IN; i++)
        acc_d[o] = acc_d[o] + acc_t'(w[o][i] * x[i]);
    end
  end

  always_ff @(posedge clk) acc_q <= acc_d;

  // Cycle 2: re-quantisation of the wide sums to 8 bits.
  always_ff @(posedge clk)
    for (int o = 0; o < N_OUT; o++)
      y[o] <= requant(longint'(acc_q[o]), SHIFT);

endmodule
