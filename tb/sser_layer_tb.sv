// sser_layer_tb: test of one SSER layer at its full default size (GRU,
// first-layer input (t, p), 128 x 128 pixels, 12 channels). It runs one
// complete time window:
//   1. waits for the post-reset initialisation of the latent memory;
//   2. streams several thousand events, mostly back to back, over a set of
//      hot pixels and random pixels, obeying the 16-cycle same-pixel rule
//      and often hitting a pixel exactly 16 cycles after its last event;
//      read-out requests for untouched pixels run alongside and must wait
//      whenever an event takes the memory port;
//   3. checks every per-event result (pixel, 12 channels) against the
//      reference model and that it appears exactly 16 cycles after the
//      event was accepted;
//   4. reads out every touched pixel and compares the final representation
//      with the model;
//   5. requests a clear while events are still in flight, checks that the
//      layer drains, refuses input while clearing, and that the memory then
//      reads back as H_0 = 0.
// Each mechanism (back-to-back events, minimum same-pixel spacing, read-out
// stall, drain before clear, clear sweep) is counted and must occur.
`timescale 1ns/1ps
module sser_layer_tb;
  import sser_pkg::*;
  import sser_ref_pkg::*;

  localparam int W = SENSOR_W, H = SENSOR_H, D = D_OUT, LAT = LATENCY;
  localparam int NEV = 6000, NHOT = 24;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic ev_valid, ev_ready, ev_p;
  logic [6:0] ev_x, ev_y;
  logic [15:0] ev_t;
  q8_t wx [3*D][2], wh [3*D][D], b [3*D];
  logic upd_valid;
  logic [6:0] upd_x, upd_y;
  q8_t upd_h [D];
  logic rd_valid, rd_ready, rdo_valid;
  logic [6:0] rd_x, rd_y;
  q8_t rdo_data [D];
  logic clear_req, clear_busy, clear_done, pipe_busy;

  // first-layer input vector u = (t / 2^16, +/-1.0)
  logic signed [X0_W-1:0] ev_u [2];
  always_comb begin
    ev_u[0] = $signed({2'b00, ev_t});
    ev_u[1] = ev_p ? 18'sd65536 : -18'sd65536;
  end

  sser_layer dut (.*);

  // ------------------------------------------------------------ reference
  int model [int][D];           // pixel address -> state (absent = 0)
  int last_acc [int];           // pixel -> cycle of its last accepted event
  typedef struct { int cyc; int x; int y; int h [D]; } exp_t;
  exp_t evq [$];
  int rdq [$];                  // pixel addresses of read-outs in flight

  int checks = 0, failures = 0, cyc = 0;
  int n_b2b = 0, n_min_spacing = 0, n_rd_stall = 0, n_drain = 0, n_sweep = 0;
  int n_events = 0, n_readouts = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(10 * 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  function automatic int small_w();
    return int'($urandom_range(0, 80)) - 40;
  endfunction

  function automatic int state_of(int a, int c);
    return model.exists(a) ? model[a][c] : 0;
  endfunction

  // Applies an accepted event to the model and queues the expected output.
  task automatic model_event(int x, int y, int t, int p);
    longint xv [];
    int hv [], bv [], hn [];
    int wxv [][], whv [][];
    exp_t e;
    int a;
    a = y * W + x;
    xv = new[2]; hv = new[D]; bv = new[3*D]; wxv = new[3*D]; whv = new[3*D];
    xv[0] = longint'(t);
    xv[1] = (p != 0) ? 65536 : -65536;
    for (int c = 0; c < D; c++) hv[c] = state_of(a, c);
    for (int o = 0; o < 3*D; o++) begin
      bv[o] = int'(b[o]);
      wxv[o] = new[2]; whv[o] = new[D];
      for (int i = 0; i < 2; i++) wxv[o][i] = int'(wx[o][i]);
      for (int j = 0; j < D; j++) whv[o][j] = int'(wh[o][j]);
    end
    ref_step(3, D, 2, X0_FRAC, xv, hv, wxv, whv, bv, hn);
    for (int c = 0; c < D; c++) model[a][c] = hn[c];
    e.cyc = cyc; e.x = x; e.y = y;
    for (int c = 0; c < D; c++) e.h[c] = hn[c];
    evq.push_back(e);
  endtask

  // ------------------------------------------------------- output checkers
  always @(posedge clk) begin
    #2;
    if (rst_n && upd_valid) begin
      exp_t e;
      if (evq.size() == 0) fail("unexpected upd_valid");
      else begin
        e = evq.pop_front();
        checks++;
        if (cyc - e.cyc != LAT) fail($sformatf("latency %0d, expected %0d", cyc - e.cyc, LAT));
        checks++;
        if (int'(upd_x) != e.x || int'(upd_y) != e.y)
          fail($sformatf("pixel (%0d,%0d) expected (%0d,%0d)", upd_x, upd_y, e.x, e.y));
        for (int c = 0; c < D; c++) begin
          checks++;
          if (int'(upd_h[c]) != e.h[c])
            fail($sformatf("event (%0d,%0d) ch %0d: got %0d exp %0d", e.x, e.y, c, upd_h[c], e.h[c]));
        end
      end
    end
    if (rst_n && rdo_valid) begin
      int a;
      if (rdq.size() == 0) fail("unexpected rdo_valid");
      else begin
        a = rdq.pop_front();
        for (int c = 0; c < D; c++) begin
          checks++;
          if (int'(rdo_data[c]) != state_of(a, c))
            fail($sformatf("read-out pixel %0d ch %0d: got %0d exp %0d", a, c, rdo_data[c], state_of(a, c)));
        end
      end
    end
  end

  // Read-out of one pixel through the valid/ready port (blocking).
  task automatic read_pixel(int x, int y);
    rd_valid = 1; rd_x = 7'(x); rd_y = 7'(y);
    forever begin
      @(posedge clk);
      if (rd_ready) break;
    end
    rdq.push_back(y * W + x);
    n_readouts++;
    #1 rd_valid = 0;
  endtask

  // --------------------------------------------------------------- stimulus
  int hot_x [NHOT], hot_y [NHOT];
  int tnow;
  logic streaming;

  // Read-out requests running alongside the event stream. They target the
  // bottom half of the sensor, which gets no events in this window.
  initial begin
    rd_valid = 0; rd_x = '0; rd_y = '0;
    @(posedge clk);           // after the main process has cleared the flag
    wait (streaming);
    while (streaming) begin
      rd_valid = 1;
      rd_x = 7'($urandom);
      rd_y = 7'(H / 2 + int'($urandom % (H / 2)));
      forever begin
        @(posedge clk);
        if (rd_ready) break;
        n_rd_stall++;
      end
      rdq.push_back(int'(rd_y) * W + int'(rd_x));
      n_readouts++;
      #1 rd_valid = 0;
      repeat ($urandom % 3) @(posedge clk);
      #1;
    end
  end

  initial begin
    int x, y, a, tries;
    logic prev;
    rst_n = 0; ev_valid = 0; ev_x = '0; ev_y = '0; ev_t = '0; ev_p = 0;
    clear_req = 0; streaming = 0;
    for (int o = 0; o < 3*D; o++) begin
      b[o] = q8_t'(small_w());
      for (int i = 0; i < 2; i++) wx[o][i] = q8_t'(small_w() * 3);
      for (int j = 0; j < D; j++) wh[o][j] = q8_t'(small_w());
    end
    for (int i = 0; i < NHOT; i++) begin
      hot_x[i] = int'($urandom % W);
      hot_y[i] = int'($urandom % (H / 2));
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // 1. post-reset initialisation
    checks++;
    if (!clear_busy || ev_ready) fail("memory initialisation did not start after reset");
    while (clear_busy) @(posedge clk);
    #1;
    n_sweep++;

    // 2.-3. one time window of events
    streaming = 1;
    tnow = 0;
    prev = 0;
    for (int k = 0; k < NEV; k++) begin
      // idle cycles now and then
      if ($urandom % 8 == 0) begin
        ev_valid = 0;
        prev = 0;
        @(posedge clk); #1;
      end
      tries = 0;
      do begin
        if ($urandom % 3 != 0) begin
          automatic int hsel = int'($urandom % NHOT);
          x = hot_x[hsel]; y = hot_y[hsel];
        end else begin
          x = int'($urandom % W); y = int'($urandom % (H / 2));
        end
        a = y * W + x;
        tries++;
      end while (last_acc.exists(a) && cyc - last_acc[a] < LAT && tries < 100);
      if (last_acc.exists(a) && cyc - last_acc[a] < LAT) begin
        // no free pixel found: wait one cycle instead
        ev_valid = 0; prev = 0;
        @(posedge clk); #1;
        continue;
      end
      if (last_acc.exists(a) && cyc - last_acc[a] == LAT) n_min_spacing++;
      tnow = tnow + int'($urandom % 4);
      if (tnow > 65535) tnow = 65535;
      ev_valid = 1; ev_x = 7'(x); ev_y = 7'(y); ev_t = 16'(tnow); ev_p = 1'($urandom);
      checks++;
      if (!ev_ready) fail("event refused outside a clear");
      model_event(x, y, tnow, int'(ev_p));
      last_acc[a] = cyc;
      n_events++;
      if (prev) n_b2b++;
      prev = 1;
      @(posedge clk); #1;
    end
    ev_valid = 0;
    streaming = 0;
    repeat (LAT + 4) @(posedge clk);
    #1;
    checks++;
    if (evq.size() != 0) fail($sformatf("%0d event results missing", evq.size()));

    // 4. read the final representation of every touched pixel
    foreach (model[a]) read_pixel(a % W, a / W);
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (rdq.size() != 0) fail("read-out responses missing");

    // 5. clear while events are in flight
    for (int k = 0; k < 4; k++) begin
      x = hot_x[k]; y = hot_y[k];
      tnow = tnow + 1;
      ev_valid = 1; ev_x = 7'(x); ev_y = 7'(y); ev_t = 16'(tnow); ev_p = 1;
      model_event(x, y, tnow, 1);
      n_events++;
      @(posedge clk); #1;
    end
    ev_valid = 0;
    clear_req = 1;
    @(posedge clk); #1;
    clear_req = 0;
    checks++;
    if (!clear_busy || ev_ready || rd_ready) fail("clear did not block the inputs");
    // the in-flight events must still complete before the sweep
    while (clear_busy && evq.size() != 0) begin
      n_drain++;
      @(posedge clk); #1;
    end
    checks++;
    if (evq.size() != 0) fail("in-flight events lost by the clear");
    while (clear_busy) @(posedge clk);
    #1;
    n_sweep++;
    model.delete();
    for (int k = 0; k < NHOT; k++) read_pixel(hot_x[k], hot_y[k]);
    for (int k = 0; k < 16; k++) read_pixel(int'($urandom % W), int'($urandom % H));
    repeat (4) @(posedge clk);
    #1;

    $display("events %0d, back-to-back %0d, min-spacing same-pixel %0d", n_events, n_b2b, n_min_spacing);
    $display("read-outs %0d, read-out stall cycles %0d, drain cycles %0d, sweeps %0d",
             n_readouts, n_rd_stall, n_drain, n_sweep);
    if (n_b2b == 0)         fail("no back-to-back events");
    if (n_min_spacing == 0) fail("no same-pixel event at the minimum spacing");
    if (n_rd_stall == 0)    fail("read-out never stalled");
    if (n_drain == 0)       fail("clear never drained the pipeline");
    if (n_sweep < 2)        fail("clear sweep missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
