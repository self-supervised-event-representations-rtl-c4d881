// act_lut: sigmoid or tanh of a vector of 8-bit pre-activations, read from a
// precomputed look-up table (one table copy per element, so the whole vector
// is converted in parallel).
//
// The paper realises both activation functions with look-up tables holding
// quantised function values. Here the table has 2^8 entries indexed by the
// signed pre-activation a (A_FRAC fraction bits, so a covers [-8, 8)). Entry
// values are computed at elaboration from the real function:
//   sigmoid: round(128 / (1 + exp(-a)))      unsigned, 0 .. 128  (gate format)
//   tanh:    min(round(128 * tanh(a)), 127)  signed, -128 .. 127 (state format)
// The read is registered twice, address and data, like a block or
// distributed ROM with an output register (latency 2, one vector per cycle).
// The table size, number formats and the two-cycle read are this design's
// choices.
module act_lut
  import sser_pkg::*;
#(
  parameter act_e        FUNC = ACT_SIGMOID,
  parameter int unsigned N    = D_OUT
) (
  input  logic clk,
  input  q8_t  a [N],
  output logic [DATA_W-1:0] y [N]
);

  typedef logic [DATA_W-1:0] rom_t [2**DATA_W];

  function automatic rom_t build_rom(act_e f);
    rom_t r;
    real  xr, v;
    longint q;
    for (int i = 0; i < 2**DATA_W; i++) begin
      xr = real'($signed(DATA_W'(i))) / real'(1 << A_FRAC);
      if (f == ACT_SIGMOID) begin
        v = 1.0 / (1.0 + $exp(-xr));
        q = longint'($rtoi(v * real'(ONE_Q) + 0.5));
      end else begin
        v = (1.0 - $exp(-2.0 * xr)) / (1.0 + $exp(-2.0 * xr));
        q = longint'($floor(v * real'(ONE_Q) + 0.5));
        if (q > 127) q = 127;
      end
      r[i] = DATA_W'(q);
    end
    return r;
  endfunction

  localparam rom_t ROM = build_rom(FUNC);

  logic [DATA_W-1:0] addr_q [N];

  always_ff @(posedge clk)
    for (int i = 0; i < N; i++)
      addr_q[i] <= a[i];

  always_ff @(posedge clk)
    for (int i = 0; i < N; i++)
      y[i] <= ROM[addr_q[i]];

endmodule
