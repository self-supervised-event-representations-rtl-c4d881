// sser_layer: one recurrent layer of the Self-Supervised Event Representation
// (SSER) generator, together with its own on-chip latent memory. It turns a
// stream of per-pixel input vectors into a dense W x H x D state, updated
// event by event; sser_encoder chains one or more of these layers.
//
// For every event (x, y, u) the layer reads the previous hidden state h_prev
// of pixel (x, y) from the latent memory, runs the quantised GRU update
// h_new = f(u, h_prev) and writes h_new back to the same pixel. For the first
// layer u = (t, p), the event's timestamp and polarity (D_IN = 2, 18-bit
// entries with 16 fraction bits); for a following layer u is the previous
// layer's new state of that pixel (D_IN = D, 8-bit entries). When all events of a time window have been
// processed, the memory holds the representation H_n, which can be read out
// pixel by pixel; clear_req then re-initialises it to H_0 = 0 for the next
// window (it is also initialised after reset).
//
// Pipeline and timing: fully pipelined, one event per cycle. An event
// accepted in cycle c (ev_valid && ev_ready) is captured at the end of cycle
// c, reads memory (2 cycles), passes the 13-cycle gru_cell and is written
// back at the end of cycle c + 15; its result appears on upd_* in cycle
// c + 16. This is the paper's 16-cycle per-event latency (160 ns at 100 MHz,
// 80 ns at 200 MHz). As in the paper, the design does not detect conflicts:
// two events of the same pixel must be at least LATENCY = 16 cycles apart,
// otherwise the second one reads a stale state. A simulation assertion
// reports violations.
//
// Interfaces:
//   ev_*      event input, valid/ready; ev_ready is low only while the
//             memory is being cleared. ev_u is the input vector (D_IN
//             signed entries of IN_W bits with IN_FRAC fraction bits).
//   upd_*     per-event result stream (pixel and new state), one cycle pulse,
//             no back-pressure; it is what a following layer consumes.
//   pipe_busy high while any event is inside the layer's pipeline.
//   rd_*      read-out of the representation: request with rd_valid/rd_ready
//             and a pixel; rdo_valid/rdo_data return the D channels two
//             cycles after the request is accepted. Events have priority on
//             the memory read port, so a request waits while events arrive.
//   clear_*   start a new window (see state_clear_ctrl); events offered
//             while the layer clears are refused (ev_ready low).
//   wx, wh, b trained, quantised weights and biases of the layer (layout in
//             gru_cell). They come from training and are inputs here.
//
// From the paper: a GRU layer with 12 channels, 8-bit weights and
// activations, a per-layer 128 x 128 x 12 state memory in block RAM, 16
// cycles per event and the same-pixel spacing rule. This design's choice:
// the interfaces above, the read-out and clear mechanisms, the pixel address
// y * W + x and all fixed-point formats.
module sser_layer
  import sser_pkg::*;
#(
  parameter cell_e       CELL = CELL_GRU,
  parameter int unsigned W    = SENSOR_W,
  parameter int unsigned H    = SENSOR_H,
  parameter int unsigned D    = D_OUT,
  parameter int unsigned D_IN    = 2,
  parameter int unsigned IN_W    = X0_W,
  parameter int unsigned IN_FRAC = X0_FRAC,
  parameter int unsigned XW   = $clog2(W),
  parameter int unsigned YW   = $clog2(H)
) (
  input  logic          clk,
  input  logic          rst_n,

  input  logic          ev_valid,
  output logic          ev_ready,
  input  logic [XW-1:0] ev_x,
  input  logic [YW-1:0] ev_y,
  input  logic signed [IN_W-1:0] ev_u [D_IN],

  input  q8_t           wx [3*D][D_IN],
  input  q8_t           wh [3*D][D],
  input  q8_t           b  [3*D],

  output logic          upd_valid,
  output logic [XW-1:0] upd_x,
  output logic [YW-1:0] upd_y,
  output q8_t           upd_h [D],

  input  logic          rd_valid,
  output logic          rd_ready,
  input  logic [XW-1:0] rd_x,
  input  logic [YW-1:0] rd_y,
  output logic          rdo_valid,
  output q8_t           rdo_data [D],

  input  logic          clear_req,
  output logic          clear_busy,
  output logic          clear_done,
  output logic          pipe_busy
);

  localparam int unsigned DEPTH  = W * H;
  localparam int unsigned ADDR_W = $clog2(DEPTH);
  localparam int unsigned TAG_W  = XW + YW;

  typedef logic [ADDR_W-1:0] addr_t;

  function automatic addr_t pix_addr(logic [XW-1:0] px, logic [YW-1:0] py);
    return addr_t'(ADDR_W'(py) * ADDR_W'(W) + ADDR_W'(px));
  endfunction

  // ------------------------------------------------------------ arbitration
  logic ev_acc, rd_acc;
  assign ev_ready = !clear_busy;
  assign ev_acc   = ev_valid && ev_ready;
  assign rd_ready = !clear_busy && !ev_valid;
  assign rd_acc   = rd_valid && rd_ready;

  // ------------------------------------------- stages 1-2: memory read
  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;   // {y, x}
  } stage_t;

  typedef logic signed [IN_W-1:0] uvec_t [D_IN];

  stage_t s1_q, s2_q;
  uvec_t  u1_q, u2_q;
  logic   r1_q, r2_q;  // read-out request in flight

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_q <= '0;
      s2_q <= '0;
      r1_q <= 1'b0;
      r2_q <= 1'b0;
    end else begin
      s1_q <= '{valid: ev_acc, tag: {ev_y, ev_x}};
      s2_q <= s1_q;
      r1_q <= rd_acc;
      r2_q <= r1_q;
    end
  end

  logic  mem_we;
  addr_t mem_waddr;
  q8_t   mem_wdata [D];
  q8_t   mem_rdata [D];

  state_mem #(.DEPTH(DEPTH), .D(D)) u_mem (
    .clk,
    .wr_en   (mem_we),
    .wr_addr (mem_waddr),
    .wr_data (mem_wdata),
    .rd_en   (ev_acc || rd_acc),
    .rd_addr (ev_acc ? pix_addr(ev_x, ev_y) : pix_addr(rd_x, rd_y)),
    .rd_data (mem_rdata)
  );

  always_ff @(posedge clk) begin
    u1_q <= ev_u;
    u2_q <= u1_q;
  end

  // ------------------------------------------- stages 3-15: recurrent cell
  logic             cell_valid, cell_busy;
  logic [TAG_W-1:0] cell_tag;
  q8_t              cell_h [D];

  gru_cell #(.CELL(CELL), .D(D), .D_IN(D_IN), .IN_W(IN_W), .IN_FRAC(IN_FRAC),
             .TAG_W(TAG_W)) u_cell (
    .clk, .rst_n,
    .in_valid  (s2_q.valid),
    .in_tag    (s2_q.tag),
    .x         (u2_q),
    .h_prev    (mem_rdata),
    .wx, .wh, .b,
    .out_valid (cell_valid),
    .out_tag   (cell_tag),
    .h_new     (cell_h),
    .busy      (cell_busy)
  );

  // ------------------------------------------- stage 16: write-back
  logic  clr_we;
  addr_t clr_addr;

  assign pipe_busy = s1_q.valid || s2_q.valid || cell_busy;

  state_clear_ctrl #(.DEPTH(DEPTH)) u_clear (
    .clk, .rst_n,
    .clear_req,
    .pipe_busy (pipe_busy),
    .busy      (clear_busy),
    .clr_we,
    .clr_addr,
    .done      (clear_done)
  );

  always_comb begin
    mem_we    = clr_we || cell_valid;
    mem_waddr = clr_we ? clr_addr
                       : pix_addr(cell_tag[XW-1:0], cell_tag[TAG_W-1:XW]);
    for (int c = 0; c < D; c++) mem_wdata[c] = clr_we ? '0 : cell_h[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_valid <= 1'b0;
      upd_x     <= '0;
      upd_y     <= '0;
    end else begin
      upd_valid <= cell_valid;
      upd_x     <= cell_tag[XW-1:0];
      upd_y     <= cell_tag[TAG_W-1:XW];
    end
  end

  always_ff @(posedge clk) upd_h <= cell_h;

  assign rdo_valid = r2_q;
  assign rdo_data  = mem_rdata;

  // ------------------------------------------- protocol checks (simulation)
  // Same-pixel spacing rule: an accepted event must not hit a pixel that an
  // event accepted in the previous LATENCY-1 cycles is still updating.
  logic [TAG_W-1:0] hist_tag [LATENCY-1];
  logic [LATENCY-2:0] hist_vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist_vld <= '0;
    end else begin
      hist_vld <= {hist_vld[LATENCY-3:0], ev_acc};
    end
  end
  always_ff @(posedge clk) begin
    hist_tag[0] <= {ev_y, ev_x};
    for (int i = 1; i < LATENCY - 1; i++) hist_tag[i] <= hist_tag[i-1];
  end

  logic same_pixel_hit;
  always_comb begin
    same_pixel_hit = 1'b0;
    for (int i = 0; i < LATENCY - 1; i++)
      if (hist_vld[i] && hist_tag[i] == {ev_y, ev_x}) same_pixel_hit = 1'b1;
  end

  logic rd_wait_q;  // a read-out request was refused last cycle
  logic chk_en_q;   // checks armed one cycle after reset
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rd_wait_q <= 1'b0;
      chk_en_q  <= 1'b0;
    end else begin
      rd_wait_q <= rd_valid && !rd_ready;
      chk_en_q  <= 1'b1;
      if (chk_en_q) begin
        a_pixel_spacing: assert (!(ev_acc && same_pixel_hit))
          else $error("two events of one pixel closer than %0d cycles", LATENCY);
        a_rd_hold: assert (!rd_wait_q || rd_valid)
          else $error("read-out request withdrawn before it was accepted");
      end
    end

endmodule
