// linear_mac_tb: streams random weight/input/bias sets, one per cycle, into
// two multipliers (the recurrent U h + b configuration, 36 x 12 with 8-bit
// inputs, and the layer-0 W x configuration, 36 x 2 with 18-bit timestamp /
// polarity inputs) and checks every output against a sum-of-products
// reference, including the 2-cycle latency and saturation at both ends.
`timescale 1ns/1ps
module linear_mac_tb;
  import sser_pkg::*;
  import sser_ref_pkg::*;

  localparam int NO = 36, NI = 12, NI0 = 2, IW0 = X0_W;
  localparam int NVEC = 400;

  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [7:0]     xh [NI];
  q8_t                   wh [NO][NI];
  q8_t                   bh [NO];
  q8_t                   yh [NO];
  logic signed [IW0-1:0] x0 [NI0];
  q8_t                   w0 [NO][NI0];
  q8_t                   b0 [NO];
  q8_t                   y0 [NO];

  linear_mac #(.N_OUT(NO), .N_IN(NI)) dut_h (.clk, .x(xh), .w(wh), .b(bh), .y(yh));
  linear_mac #(.N_OUT(NO), .N_IN(NI0), .IN_W(IW0), .IN_FRAC(X0_FRAC))
    dut_0 (.clk, .x(x0), .w(w0), .b(b0), .y(y0));

  int checks = 0, failures = 0, sat_hits = 0;
  int exp_h [NVEC][NO];
  int exp_0 [NVEC][NO];

  initial begin
    #(10 * (NVEC + 100));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc;
    for (int v = 0; v < NVEC; v++) begin
      // vectors 0..9 use extreme values to reach saturation
      for (int i = 0; i < NI; i++) xh[i] = (v < 10) ? 8'sd127 : $signed(8'($urandom));
      for (int o = 0; o < NO; o++) begin
        bh[o] = $signed(8'($urandom));
        for (int i = 0; i < NI; i++)
          wh[o][i] = (v < 5) ? 8'sd127 : (v < 10) ? -8'sd128 : $signed(8'($urandom));
        acc = longint'(bh[o]) * 256;
        for (int i = 0; i < NI; i++) acc += longint'(wh[o][i]) * longint'(xh[i]);
        exp_h[v][o] = ref_requant(acc, 8);
      end
      x0[0] = $signed({2'b00, 16'($urandom)});
      x0[1] = ($urandom % 2 != 0) ? $signed(IW0'(65536)) : -$signed(IW0'(65536));
      for (int o = 0; o < NO; o++) begin
        b0[o] = $signed(8'($urandom));
        for (int i = 0; i < NI0; i++) w0[o][i] = $signed(8'($urandom));
        acc = longint'(b0[o]) * (longint'(1) << 17);
        for (int i = 0; i < NI0; i++) acc += longint'(w0[o][i]) * longint'(x0[i]);
        exp_0[v][o] = ref_requant(acc, 17);
      end
      @(posedge clk);
      #1;
      if (v >= 1) check(v - 1);
    end
    for (int v = NVEC; v < NVEC + 1; v++) begin
      @(posedge clk);
      #1;
      check(v - 1);
    end
    if (sat_hits == 0) begin
      failures++;
      $display("saturation never reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int v);
    for (int o = 0; o < NO; o++) begin
      checks += 2;
      if (int'(yh[o]) != exp_h[v][o]) begin
        failures++;
        if (failures < 10) $display("U-path vec %0d out %0d: got %0d exp %0d", v, o, yh[o], exp_h[v][o]);
      end
      if (int'(y0[o]) != exp_0[v][o]) begin
        failures++;
        if (failures < 10) $display("W-path vec %0d out %0d: got %0d exp %0d", v, o, y0[o], exp_0[v][o]);
      end
      if (exp_h[v][o] == 127 || exp_h[v][o] == -128) sat_hits++;
    end
  endtask
endmodule
