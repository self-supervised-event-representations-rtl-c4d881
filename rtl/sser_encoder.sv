// sser_encoder: the SSER event-representation generator, the design's top
// level. It turns a stream of camera events e = (x, y, t, p) into a dense
// W x H x D representation that keeps each pixel's event timing and
// polarity, updating it one event at a time.
//
// The encoder is a chain of LAYERS recurrent layers (sser_layer), each with
// its own per-pixel latent memory. The first layer receives u = (t, p); each
// following layer receives the new state of the same pixel from the layer
// before it; the last layer's memory is the representation. After the last
// event of a time window it is read out pixel by pixel through rd_*, and
// clear_req starts the next window from H_0 = 0.
//
// Input encoding: t is the time offset of the event in the window, 16 bit
// (microsecond ticks of a window up to 65 ms), fed to the first layer as the
// fraction t / 2^16; p = 1 is positive polarity (+1.0), p = 0 negative
// (-1.0).
//
// Timing: fully pipelined, one event per cycle; each layer takes 16 cycles,
// so an event accepted in cycle c leaves the last layer on upd_* in cycle
// c + 16 * LAYERS. Two events of the same pixel must be at least 16 cycles
// apart (the paper's only constraint; not checked in hardware). ev_ready
// drops only while a clear is pending or running.
//
// Clearing: a clear request is held until no event is in flight in any
// layer (new events are refused meanwhile), then all layers sweep their
// memories together; this keeps a layer from refusing an event that the
// layer before it has already produced.
//
// Weights: wx0 are the first layer's input weights (3*D x 2), wxn the input
// weights of layers 1 .. LAYERS-1 (3*D x D each; one unused entry when
// LAYERS = 1), wh and b each layer's recurrent weights and biases. Layout and
// formats as in gru_cell and sser_pkg; they come from training.
//
// From the paper: the layer chain of its overview figure, each layer with
// its own state memory, the 12-channel 8-bit GRU and 16-bit timestamps, and
// a single layer as the implemented hardware configuration (LAYERS = 1, the
// default). This design's choice: the interfaces, the time and polarity
// encoding, the clear protocol and the read-out of the last layer only.
module sser_encoder
  import sser_pkg::*;
#(
  parameter int unsigned LAYERS = 1,
  parameter cell_e       CELL   = CELL_GRU,
  parameter int unsigned W      = SENSOR_W,
  parameter int unsigned H      = SENSOR_H,
  parameter int unsigned D      = D_OUT,
  parameter int unsigned XW     = $clog2(W),
  parameter int unsigned YW     = $clog2(H),
  parameter int unsigned NXN    = (LAYERS > 1) ? LAYERS - 1 : 1
) (
  input  logic           clk,
  input  logic           rst_n,

  input  logic           ev_valid,
  output logic           ev_ready,
  input  logic [XW-1:0]  ev_x,
  input  logic [YW-1:0]  ev_y,
  input  logic [T_W-1:0] ev_t,
  input  logic           ev_p,

  input  q8_t            wx0 [3*D][2],
  input  q8_t            wxn [NXN][3*D][D],
  input  q8_t            wh  [LAYERS][3*D][D],
  input  q8_t            b   [LAYERS][3*D],

  output logic           upd_valid,
  output logic [XW-1:0]  upd_x,
  output logic [YW-1:0]  upd_y,
  output q8_t            upd_h [D],

  input  logic           rd_valid,
  output logic           rd_ready,
  input  logic [XW-1:0]  rd_x,
  input  logic [YW-1:0]  rd_y,
  output logic           rdo_valid,
  output q8_t            rdo_data [D],

  input  logic           clear_req,
  output logic           clear_busy,
  output logic           clear_done
);

  localparam int unsigned LAST = LAYERS - 1;

  // ------------------------------------------------------ per-layer signals
  logic          l_ev_valid  [LAYERS];
  logic          l_ev_ready  [LAYERS];
  logic          l_upd_valid [LAYERS];
  logic [XW-1:0] l_upd_x     [LAYERS];
  logic [YW-1:0] l_upd_y     [LAYERS];
  q8_t           l_upd_h     [LAYERS][D];
  logic          l_rd_ready  [LAYERS];
  logic          l_rdo_valid [LAYERS];
  q8_t           l_rdo_data  [LAYERS][D];
  logic          l_clr_busy  [LAYERS];
  logic          l_clr_done  [LAYERS];
  logic          l_pipe_busy [LAYERS];

  // ------------------------------------------------------ clear protocol
  logic clear_pend_q, clear_go, any_busy;

  always_comb begin
    any_busy = 1'b0;
    for (int l = 0; l < LAYERS; l++)
      any_busy = any_busy || l_pipe_busy[l] || l_clr_busy[l];
  end

  assign clear_go = clear_pend_q && !any_busy;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        clear_pend_q <= 1'b0;
    else if (clear_go) clear_pend_q <= 1'b0;
    else if (clear_req) clear_pend_q <= 1'b1;

  assign clear_busy = clear_pend_q || l_clr_busy[0];
  assign clear_done = l_clr_done[0];

  // ------------------------------------------------------ first-layer input
  logic signed [X0_W-1:0] u0 [2];
  always_comb begin
    u0[0] = $signed({2'b00, ev_t});                           // t / 2^16
    u0[1] = ev_p ? $signed(X0_W'(1 << X0_FRAC))               // +1.0
                 : -$signed(X0_W'(1 << X0_FRAC));             // -1.0
  end

  assign l_ev_valid[0] = ev_valid && !clear_pend_q;
  assign ev_ready      = l_ev_ready[0] && !clear_pend_q;

  // ------------------------------------------------------ layer chain
  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    logic          lrd_valid;
    logic [XW-1:0] lrd_x;
    logic [YW-1:0] lrd_y;

    // Only the last layer's memory is read out.
    if (l == LAST) begin : g_rd
      assign lrd_valid = rd_valid && !clear_pend_q;
      assign lrd_x     = rd_x;
      assign lrd_y     = rd_y;
    end else begin : g_nord
      assign lrd_valid = 1'b0;
      assign lrd_x     = '0;
      assign lrd_y     = '0;
    end

    if (l == 0) begin : g_first
      sser_layer #(.CELL(CELL), .W(W), .H(H), .D(D), .D_IN(2), .IN_W(X0_W),
                   .IN_FRAC(X0_FRAC)) u_layer (
        .clk, .rst_n,
        .ev_valid (l_ev_valid[0]), .ev_ready (l_ev_ready[0]),
        .ev_x, .ev_y, .ev_u (u0),
        .wx (wx0), .wh (wh[0]), .b (b[0]),
        .upd_valid (l_upd_valid[0]), .upd_x (l_upd_x[0]), .upd_y (l_upd_y[0]),
        .upd_h (l_upd_h[0]),
        .rd_valid (lrd_valid), .rd_ready (l_rd_ready[0]), .rd_x (lrd_x), .rd_y (lrd_y),
        .rdo_valid (l_rdo_valid[0]), .rdo_data (l_rdo_data[0]),
        .clear_req (clear_go), .clear_busy (l_clr_busy[0]),
        .clear_done (l_clr_done[0]), .pipe_busy (l_pipe_busy[0]));
    end else begin : g_next
      assign l_ev_valid[l] = l_upd_valid[l-1];

      sser_layer #(.CELL(CELL), .W(W), .H(H), .D(D), .D_IN(D), .IN_W(DATA_W),
                   .IN_FRAC(H_FRAC)) u_layer (
        .clk, .rst_n,
        .ev_valid (l_ev_valid[l]), .ev_ready (l_ev_ready[l]),
        .ev_x (l_upd_x[l-1]), .ev_y (l_upd_y[l-1]), .ev_u (l_upd_h[l-1]),
        .wx (wxn[l-1]), .wh (wh[l]), .b (b[l]),
        .upd_valid (l_upd_valid[l]), .upd_x (l_upd_x[l]), .upd_y (l_upd_y[l]),
        .upd_h (l_upd_h[l]),
        .rd_valid (lrd_valid), .rd_ready (l_rd_ready[l]), .rd_x (lrd_x), .rd_y (lrd_y),
        .rdo_valid (l_rdo_valid[l]), .rdo_data (l_rdo_data[l]),
        .clear_req (clear_go), .clear_busy (l_clr_busy[l]),
        .clear_done (l_clr_done[l]), .pipe_busy (l_pipe_busy[l]));
    end
  end

  // ------------------------------------------------------ outputs
  assign upd_valid = l_upd_valid[LAST];
  assign upd_x     = l_upd_x[LAST];
  assign upd_y     = l_upd_y[LAST];
  assign upd_h     = l_upd_h[LAST];
  assign rd_ready  = l_rd_ready[LAST] && !clear_pend_q;
  assign rdo_valid = l_rdo_valid[LAST];
  assign rdo_data  = l_rdo_data[LAST];

  // ------------------------------------------------------ checks (simulation)
  // A layer never refuses an event produced by the layer before it.
  logic chk_en_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en_q <= 1'b0;
    else begin
      chk_en_q <= 1'b1;
      if (chk_en_q)
        for (int l = 1; l < LAYERS; l++)
          a_chain: assert (!l_ev_valid[l] || l_ev_ready[l])
            else $error("layer %0d refused an event from layer %0d", l, l - 1);
    end

endmodule
