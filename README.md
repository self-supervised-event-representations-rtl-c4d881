# SSER: a recurrent, event-by-event representation generator for event cameras

An event camera reports brightness changes as a sparse stream of events
`e = (x, y, t, p)`: pixel, timestamp and polarity. Most detectors want a dense
image-like tensor instead. The usual ways of building one (histograms, voxel
grids, time surfaces) bin or summarise the timestamps and so lose timing detail.
The Self-Supervised Event Representation (SSER) method, from *"Self-Supervised
Event Representations: Towards Accurate, Real-Time Perception on SoC FPGAs"*
(Jeziorek and Kryjak), takes another route. Each pixel keeps a small recurrent
hidden state, 12 channels of 8 bits. Every event updates the state of its own
pixel through a trained GRU (gated recurrent unit) cell. After a time window,
the `W x H x 12` array of states is the representation.

Training is self-supervised: a decoder learns to rebuild the events from the
state. Training happens offline. The hardware only runs the encoder.

This repository holds synthesizable SystemVerilog for that encoder, sized as
in the paper's FPGA prototype:

- one GRU layer with 12 channels;
- 8-bit weights and activations, 16-bit timestamps;
- an on-chip 128 x 128 x 12 state memory (1.5 Mbit, 48 block RAMs);
- a fully pipelined datapath: one event per clock, 16 clocks from event to
  written-back state (160 ns at 100 MHz, 80 ns at 200 MHz).

The design can also:

- chain several layers, as in the method's overview figure;
- use the Minimal Gated Unit (MGU) instead of the GRU.

The paper gives the equations, the sizes, the operator structure and the
latency. It does not give number formats, stage-by-stage timing, interfaces,
or how the memory is initialised and read out. Those are this design's own
choices, marked as such below and in each file's header.

## The recurrent update

For the event at pixel `(x, y)`, let `h` be that pixel's stored state and
`u = (t, p)` the input. The GRU computes

```
z  = sigmoid(W_z u + U_z h + b_z)          update gate
r  = sigmoid(W_r u + U_r h + b_r)          reset gate
h~ = tanh(W_h u + r * (U_h h + b_h))       candidate
h' = (1 - z) * h + z * h~                  new state, written back to (x, y)
```

`*` is element-wise. The MGU variant (`CELL = CELL_MGU`) uses a single
forget gate `f` in place of both `z` and `r`. Its multipliers are 2 x 12 wide
instead of 3 x 12, and it takes the same number of cycles.

The hardware builds this from five kinds of operators, one module each:

| operation | module | structure |
|---|---|---|
| matrix-vector product | `linear_mac` | one multiplier per product; sum in 1 cycle, re-quantise in a 2nd |
| vector addition | `vec_add` | saturating, 1 cycle |
| element-wise product | `vec_mul` | one multiplier per element, 1 cycle + 1 re-quantise |
| sigmoid / tanh | `act_lut` | 256-entry table per element, 2-cycle read |
| `1 - z` | `one_minus` | 1 cycle |

The three input matrices `W_z, W_r, W_h` form one merged 36-output multiplier.
The three recurrent matrices `U_z, U_r, U_h` form another. Both outputs are
then split into the gate slices. The recurrent unit also adds the biases. That
way `b_h` lands inside the reset-gate product, exactly as in the equation.

## Number formats

Every value is an 8-bit integer with an implied binary point. The paper
fixes only the widths (8-bit model, 16-bit timestamp). The binary-point
positions below are this design's choice, made so that each value's range fits
what it carries:

| quantity | type | fraction bits | range |
|---|---|---|---|
| weights | signed 8 | 5 | [-4, 4) |
| biases, gate pre-activations | signed 8 | 4 | [-8, 8) |
| hidden state, `h~` | signed 8 | 7 | [-1, 1) |
| gates `z`, `r`, `1 - z` | unsigned 8 | 7 | [0, 1], 1.0 = 128 |
| timestamp `t` | unsigned 16 | 16 | t / 65536 in [0, 1) |
| polarity `p` | sign | - | +1.0 (p = 1) or -1.0 (p = 0) |

The gates are unsigned with 1.0 = 128, so that both `z` and `1 - z` are
exact over the whole [0, 1] range.

Every multiplier stage re-quantises its wide result back to 8 bits. It
shifts right, rounds half up and saturates to [-128, 127]. Additions saturate
too.

The sigmoid table holds `round(128 / (1 + e^-a))` and the tanh table holds
`min(round(128 tanh a), 127)`. Both are indexed by the 8-bit pre-activation
`a`. The tables are computed at elaboration from these formulas, so no data
files are needed.

`t` is the event's offset from the start of its time window, in
microseconds. 16 bits cover a window of up to 65 ms; the paper works with
50 ms. The first layer reads `t` as the fraction `t / 2^16`. The paper does not
say how timestamps were scaled in training; the scaling here is a choice that
the trained weights must be made to match.

The trained weights must be quantised to these same formats. To change a
format, edit the constants in `sser_pkg`. The reference model in
`tb/sser_ref_pkg.sv` follows the same constants by hand.

## The 16-cycle event pipeline

This is the part that needs the most care. Each event reads a pixel's state
and writes the same pixel back 16 cycles later, and a new event enters every
cycle. Several events can therefore be in flight at once. In cycle numbers,
with the event accepted in cycle 0 (`ev_valid && ev_ready`):

| end of cycle | stage | module |
|---|---|---|
| 0 | event captured, memory read address registered | `sser_layer`, `state_mem` |
| 1 | state `h` out of the RAM output register | `state_mem` |
| 2 | all products `W u`, `U h + b` summed | `linear_mac` x2 |
| 3 | re-quantised to 8 bits | `linear_mac` |
| 4 | gate pre-activations `W_g u + U_g h` | `vec_add` |
| 5-6 | `z`, `r` from the sigmoid table | `act_lut` |
| 7 | `1 - z`; product `r * (U_h h + b_h)` | `one_minus`, `vec_mul` |
| 8 | product re-quantised | `vec_mul` |
| 9 | candidate pre-activation | `vec_add` |
| 10-11 | `h~` from the tanh table | `act_lut` |
| 12 | `z * h~` and `(1 - z) * h` | `vec_mul` (24 wide) |
| 13 | re-quantised | `vec_mul` |
| 14 | `h'` summed | `vec_add` |
| 15 | `h'` written to the RAM | `state_mem` |

`upd_valid` with the pixel and `h'` follows in cycle 16. Cycles 2-14 are
`gru_cell`, whose latency is 13. Operands needed later (`W_h u`, `U_h h`,
`z`, `1 - z`, the old `h`) travel in delay registers alongside. The paper
gives the total of 16 cycles and the 1 + 1 cycles of each multiplier. The
split of the remaining cycles above is this design's own.

**The same-pixel rule.** The paper adds no forwarding or stall logic. Instead,
two events of the same pixel must arrive at least 16 cycles apart. Otherwise
the second one reads a state that the first has not yet written. Here is why
exactly 16 is enough. An event accepted in cycle `c` writes at the end of cycle
`c + 15`. An event to the same pixel accepted in cycle `c + 16` reads after that
write. The RAM is read-first, so one accepted in cycle `c + 15` would still see
the old value. A real sensor produces at most one event per pixel per few
microseconds, hundreds of cycles apart, so the rule costs nothing in practice.
`sser_layer` includes a simulation assertion that flags violations. Nothing
in the synthesized logic checks the rule.

## Latent memory, read-out and a new window

Each layer owns a `state_mem`: `W x H` words of `12 x 8 = 96` bits. It has
one write port and one read port, with a 2-cycle registered read that maps
onto block RAM. The RAM has no reset.

**Initialisation.** `state_clear_ctrl` writes `H_0 = 0` into every word, one
per cycle (16 384 cycles at 128 x 128). This happens straight out of reset
and again whenever `clear_req` starts a new window. During a clear, the
controller first waits until no event is left in the pipeline, so that a late
write-back cannot land in a freshly cleared memory. Then it sweeps.
`clear_busy` covers both phases, and events and read-out requests are refused
while it is high. The paper says only that the state starts from an
initialised `H_0`. The zero value and the sweep are this design's choice.

**Read-out.** At the end of a window the final state array is the
representation. `rd_valid / rd_x / rd_y` requests one pixel. `rdo_valid` /
`rdo_data` return its 12 channels two cycles after the request is accepted.
Read-out shares the RAM read port with the event stream. Events always win,
so a request waits (`rd_ready` low) in any cycle with `ev_valid` high.
Reading out while events still arrive is allowed. A pixel being updated at that
moment returns its state from before or after the update, depending on timing.

## Layers

`sser_encoder` chains `LAYERS` copies of `sser_layer`. The first receives
`(t, p)`. Each later layer receives, as its input vector, the new 12-channel
state of the same pixel from the layer before. It keeps its own state memory
and weights. Only the last layer's memory is read out. The latency is
`16 x LAYERS` cycles.

The paper's overview figure shows three layers, and its encoder experiments
use three. Its FPGA prototype implements a single layer, so the default here
is `LAYERS = 1`.

With more than one layer, a clear could catch events between layers. To
prevent this, the encoder holds a clear request, refusing new events, until
every layer's pipeline is empty. Then all layers sweep together. This keeps a
later layer from refusing an event that an earlier one has already produced.

## Top-level interface (`sser_encoder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset (starts the memory sweep) |
| `ev_valid`, `ev_ready` | in/out | 1 | event handshake; ready is low only around a clear |
| `ev_x`, `ev_y` | in | 7, 7 | pixel (log2 W, log2 H bits) |
| `ev_t` | in | 16 | time since window start, microseconds |
| `ev_p` | in | 1 | polarity, 1 = positive |
| `wx0` | in | 36 x 2 x 8 | first layer's input weights |
| `wxn` | in | (LAYERS-1) x 36 x 12 x 8 | later layers' input weights (one unused entry if LAYERS = 1) |
| `wh`, `b` | in | LAYERS x 36 x 12 x 8, LAYERS x 36 x 8 | recurrent weights and biases |
| `upd_valid`, `upd_x`, `upd_y`, `upd_h` | out | 1, 7, 7, 12 x 8 | each event's new state (last layer), for streaming consumers |
| `rd_valid`, `rd_ready`, `rd_x`, `rd_y` | in/out | 1, 1, 7, 7 | read-out request |
| `rdo_valid`, `rdo_data` | out | 1, 12 x 8 | read-out data |
| `clear_req`, `clear_busy`, `clear_done` | in/out | 1 | start a new window / in progress / finished pulse |

`upd_*` has no back-pressure. Weights are plain inputs, to be held constant
while events are processed. How they get there (registers written by a host,
or constants) is left to the integration. Rows of the 36-row arrays are
gate-major: rows 0-11 `z`, 12-23 `r`, 24-35 the candidate. For the MGU, rows
0-11 are `f`, 12-23 the candidate, and 24-35 are unused.

Parameters: `LAYERS` (1), `CELL` (`CELL_GRU`), `W`, `H` (128), `D` (12).
The widths and formats are constants in `sser_pkg`. `W` and `H` need not be
powers of two; the pixel address is `y * W + x`.

## Files

| file | content |
|---|---|
| `rtl/sser_pkg.sv` | sizes, formats, `requant` / `sat_add` helpers, cell and activation enums |
| `rtl/sser_encoder.sv` | top: layer chain, (t, p) encoding, clear protocol |
| `rtl/sser_layer.sv` | one layer: memory, read/write-back, read-out arbitration, clear |
| `rtl/gru_cell.sv` | the 13-cycle recurrent datapath |
| `rtl/linear_mac.sv`, `vec_add.sv`, `vec_mul.sv`, `one_minus.sv`, `act_lut.sv` | operators |
| `rtl/state_mem.sv`, `state_clear_ctrl.sv` | state memory and its initialisation |
| `rtl/pipe_delay.sv` | delay line used for the cell's valid/tag |
| `tb/sser_ref_pkg.sv` | bit-accurate reference model of the update, written from the equations |
| `tb/*_tb.sv` | one self-checking testbench per module, plus the encoder variants |

## Verification

Each module has a self-checking testbench. It compares outputs with values
computed independently, checks the latency in cycles, and ends with a
`TB_RESULT checks=N failures=M` line.

- **Operators.** These are checked exhaustively (both activation tables, all
  `1 - z` inputs) or with thousands of random vectors, including saturation.
- **`gru_cell_tb`.** Runs a GRU and an MGU cell on random weights, with inputs
  arriving back to back, against the reference model. Latency 13.
- **`sser_layer_tb` and `sser_encoder_tb`.** These run at full default size
  (128 x 128 x 12) through one complete window:
  - 6 000 events with the reference model checked per event, latency exactly
    16;
  - about 240 same-pixel pairs at exactly the minimum 16-cycle spacing;
  - read-out requests stalled by the event stream;
  - read-out of the final representation;
  - a clear issued while events are in flight (it must drain first), then an
    all-zero memory.

  Each of these mechanisms is counted and must occur.
- **`sser_encoder_stack_tb`.** The three-layer chain at 32 x 32, latency 48.
- **`sser_encoder_mgu_tb`.** The MGU variant at full size.
- **`sser_encoder_gen1_tb`.** One GRU layer sized for the 304 x 240 Gen1
  sensor. Neither side is a power of two, so this exercises the
  `y * W + x` addressing and a 72,960-word sweep.
- **`sser_encoder_d16_tb`.** A 16-channel hidden state, the widest in the
  paper's ablation, at 64 x 64. The latency is still 16.

Every testbench also has a watchdog.

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/sser_pkg.sv tb/sser_ref_pkg.sv tb/sser_encoder_tb.sv \
  --top-module sser_encoder_tb -o sim && obj_dir/sim +verilator+rand+reset+2
```

Replace `sser_encoder_tb` with any other testbench name. The
`+verilator+rand+reset+2` plusarg starts every register at a random value,
which checks that nothing depends on an initial value the hardware would not
have.

Each run takes about a second. To lint the RTL, run
`verilator --lint-only -Wall -Irtl -y rtl rtl/sser_pkg.sv rtl/sser_encoder.sv`.
It prints one warning, for the unused `wxn` port when `LAYERS = 1`. The
port is kept so that the port list does not change with `LAYERS`. Linting a
leaf module on its own also lists the package constants it does not use.

The weights used in the tests are random. No trained weight set is included,
so the tests show that the RTL computes the quantised GRU as specified here,
not that it reproduces the paper's detection accuracy. Accuracy also depends
on how the trained model's quantisation maps onto the formats above.

## Sizes and limits

- **Memory.** The default 128 x 128 x 12 x 8 state is 1,572,864 bits per
  layer; the paper reports 48 BRAM36 for it.
  - Full Gen1 resolution (304 x 240) needs 7.0 Mbit. Set `W = 304, H = 240`; that size is simulated end to end.
  - The 1 Mpx sensor (1280 x 720) needs 88 Mbit per layer, more than the
    on-chip memory of the target class of device.
- **Throughput.** One event per cycle per layer: 100 Mev/s at 100 MHz,
  200 Mev/s at 200 MHz. Faster sensors would need several layers in
  parallel, each working on its own region of pixels. That is not built here.
- **Timestamps.** 16 bits at 1 microsecond cover 65 ms. Longer windows need a
  coarser tick.
- **Precision.** It is fixed at 8 bits. The precision sweep of the paper's
  ablation (2-12 bits) would need the formats in `sser_pkg` and the
  re-quantisation shifts generalised.
- **Resources.** The datapath multiplies with 36 x 14 + 36 parallel
  multipliers per GRU layer. The paper reports 108 DSP slices and
  19k-27k LUTs for the layer logic, depending on cell type and clock. How its multipliers split between DSPs and LUTs is
  not described, so this RTL makes no attempt to match those figures.
- **Lower-cost pipeline.** The paper notes that relaxing the pipeline to about
  100 cycles per event would save most of the multipliers while keeping the
  latency under a microsecond. That version is not described in detail and is
  not built here.
