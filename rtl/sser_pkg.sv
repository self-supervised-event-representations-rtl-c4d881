// sser_pkg: constants, types and fixed-point helpers shared by the SSER
// recurrent-layer accelerator.
//
// Numbers taken from the paper: 12 representation channels (d_out), 8-bit
// weights and activations, 16-bit timestamps, a 128 x 128 sensor window and a
// 16-cycle per-event pipeline. Everything about the fixed-point formats (where
// the binary point sits, rounding, saturation) is this design's own choice,
// because the paper only gives the bit widths:
//   weights           signed 8 bit, W_FRAC = 5 fraction bits   (range [-4, 4))
//   pre-activations   signed 8 bit, A_FRAC = 4 fraction bits   (range [-8, 8))
//   hidden state      signed 8 bit, H_FRAC = 7 fraction bits   (range [-1, 1))
//   gates z, r, 1-z   unsigned 8 bit, H_FRAC fraction bits     (range [0, 1])
//   timestamp input   unsigned 16 bit, read as t / 2^16         (range [0, 1))
//   polarity input    +1 / -1, carried with X0_FRAC fraction bits
// Biases are signed 8 bit in the pre-activation format (A_FRAC).
package sser_pkg;

  // Sizes from the paper.
  localparam int unsigned D_OUT    = 12;   // channels of the representation
  localparam int unsigned DATA_W   = 8;    // weight / activation precision
  localparam int unsigned T_W      = 16;   // timestamp width
  localparam int unsigned SENSOR_W = 128;  // on-chip representation width
  localparam int unsigned SENSOR_H = 128;  // on-chip representation height
  localparam int unsigned LATENCY  = 16;   // cycles per event, fully pipelined

  // Fixed-point formats (this design's choice).
  localparam int unsigned W_FRAC  = 5;
  localparam int unsigned A_FRAC  = 4;
  localparam int unsigned H_FRAC  = 7;
  localparam int unsigned X0_FRAC = T_W;      // layer-0 input (t, p) fraction bits
  localparam int unsigned X0_W    = T_W + 2;  // holds t in [0,1) and p = +/-1.0
  localparam int unsigned ONE_Q   = 1 << H_FRAC;  // the constant 1 in gate format

  // Recurrent cell variant: the full GRU (the paper's main model) or the
  // Minimal Gated Unit, whose single forget gate replaces both z and r.
  typedef enum logic {CELL_GRU = 1'b0, CELL_MGU = 1'b1} cell_e;

  // Activation implemented by a look-up table.
  typedef enum logic {ACT_SIGMOID = 1'b0, ACT_TANH = 1'b1} act_e;

  typedef logic signed [DATA_W-1:0] q8_t;   // signed 8-bit quantity
  typedef logic        [DATA_W-1:0] u8_t;   // unsigned 8-bit gate value

  // Number of gate blocks computed by the merged multiplier: z, r, h for the
  // GRU (3 * d_out outputs), f, h for the MGU (2 * d_out outputs).
  function automatic int unsigned n_gates(cell_e c);
    return (c == CELL_GRU) ? 3 : 2;
  endfunction

  // Re-quantisation: arithmetic shift right by SHIFT with round-half-up, then
  // saturation to the signed 8-bit range.
  function automatic q8_t requant(input longint acc, input int unsigned shift);
    longint r;
    r = (shift == 0) ? acc : ((acc + (64'sd1 <<< (shift - 1))) >>> shift);
    if (r > 127)       return 8'sd127;
    else if (r < -128) return -8'sd128;
    else               return q8_t'(r);
  endfunction

  // Saturating signed 8-bit addition.
  function automatic q8_t sat_add(input q8_t a, input q8_t b);
    logic signed [DATA_W:0] s;
    s = {a[DATA_W-1], a} + {b[DATA_W-1], b};
    if (s > 127)       return 8'sd127;
    else if (s < -128) return -8'sd128;
    else               return q8_t'(s);
  endfunction

endpackage
