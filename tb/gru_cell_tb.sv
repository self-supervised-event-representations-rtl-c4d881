// gru_cell_tb: drives a GRU cell and an MGU cell (both 12 channels, layer-0
// input (t, p)) with random weights and a random stream of inputs, valid in
// about 3 of 4 cycles and often back to back, and checks every h_new and tag
// against the reference model, and that each result appears exactly 13
// cycles after its input (the cell's share of the 16-cycle event latency).
`timescale 1ns/1ps
module gru_cell_tb;
  import sser_pkg::*;
  import sser_ref_pkg::*;

  localparam int D = 12, DI = 2, NCYC = 3000, LAT = 13, TW = 14;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic in_valid;
  logic [TW-1:0] in_tag;
  logic signed [X0_W-1:0] x [DI];
  q8_t hp [D];
  q8_t wx [3*D][DI], wh [3*D][D], b [3*D];
  logic ov [2], bz [2];
  logic [TW-1:0] ot [2];
  q8_t hn [2][D];

  gru_cell #(.CELL(CELL_GRU), .TAG_W(TW)) dut_gru (
    .clk, .rst_n, .in_valid, .in_tag, .x, .h_prev(hp), .wx, .wh, .b,
    .out_valid(ov[0]), .out_tag(ot[0]), .h_new(hn[0]), .busy(bz[0]));
  gru_cell #(.CELL(CELL_MGU), .TAG_W(TW)) dut_mgu (
    .clk, .rst_n, .in_valid, .in_tag, .x, .h_prev(hp), .wx, .wh, .b,
    .out_valid(ov[1]), .out_tag(ot[1]), .h_new(hn[1]), .busy(bz[1]));

  typedef struct { int cyc; int tag; int h [D]; } exp_t;
  exp_t q [2][$];
  int checks = 0, failures = 0, cyc = 0, issued = 0, b2b = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #(10 * (NCYC + 200));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int small_w();
    return int'($urandom_range(0, 80)) - 40;
  endfunction

  task automatic push_expected();
    longint xv [];
    int hv [], bv [], hnv [];
    int wxv [][], whv [][];
    exp_t e;
    xv = new[DI]; hv = new[D]; bv = new[3*D];
    wxv = new[3*D]; whv = new[3*D];
    foreach (x[i]) xv[i] = longint'(x[i]);
    foreach (hp[i]) hv[i] = int'(hp[i]);
    for (int o = 0; o < 3*D; o++) begin
      bv[o] = int'(b[o]);
      wxv[o] = new[DI]; whv[o] = new[D];
      for (int i = 0; i < DI; i++) wxv[o][i] = int'(wx[o][i]);
      for (int j = 0; j < D; j++)  whv[o][j] = int'(wh[o][j]);
    end
    for (int m = 0; m < 2; m++) begin
      ref_step((m == 0) ? 3 : 2, D, DI, X0_FRAC, xv, hv, wxv, whv, bv, hnv);
      e.cyc = cyc; e.tag = int'(in_tag);
      for (int c = 0; c < D; c++) e.h[c] = hnv[c];
      q[m].push_back(e);
    end
  endtask

  // output checker, sampled just after each edge
  always @(posedge clk) begin
    #2;
    for (int m = 0; m < 2; m++) if (rst_n && ov[m]) begin
      exp_t e;
      if (q[m].size() == 0) begin
        failures++;
        $display("cell %0d: unexpected output", m);
      end else begin
        e = q[m].pop_front();
        checks++;
        if (cyc - e.cyc != LAT) begin
          failures++;
          $display("cell %0d: latency %0d, expected %0d", m, cyc - e.cyc, LAT);
        end
        checks++;
        if (int'(ot[m]) != e.tag) begin
          failures++;
          $display("cell %0d: tag %0d exp %0d", m, ot[m], e.tag);
        end
        for (int c = 0; c < D; c++) begin
          checks++;
          if (int'(hn[m][c]) != e.h[c]) begin
            failures++;
            if (failures < 20) $display("cell %0d ch %0d: got %0d exp %0d", m, c, hn[m][c], e.h[c]);
          end
        end
      end
    end
  end

  initial begin
    logic prev_valid;
    rst_n = 0; in_valid = 0; in_tag = '0; prev_valid = 0;
    foreach (x[i]) x[i] = '0;
    foreach (hp[i]) hp[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < NCYC; k++) begin
      // new weights now and then (only while the pipeline is empty, as
      // weights are static during operation)
      if (k % 500 == 0) begin
        in_valid = 0;
        repeat (LAT + 2) @(posedge clk);
        #1;
        for (int o = 0; o < 3*D; o++) begin
          b[o] = q8_t'(small_w());
          for (int i = 0; i < DI; i++) wx[o][i] = q8_t'(small_w() * 3);
          for (int j = 0; j < D; j++)  wh[o][j] = q8_t'(small_w());
        end
      end
      in_valid = ($urandom % 4) != 0;
      in_tag = TW'($urandom);
      x[0] = $signed({2'b00, 16'($urandom)});
      x[1] = ($urandom % 2 != 0) ? $signed(X0_W'(65536)) : -$signed(X0_W'(65536));
      foreach (hp[i]) hp[i] = $signed(8'($urandom));
      if (in_valid) begin
        push_expected();
        issued++;
        if (prev_valid) b2b++;
      end
      prev_valid = in_valid;
      @(posedge clk);
      #1;
    end
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    #3;
    for (int m = 0; m < 2; m++) begin
      checks++;
      if (q[m].size() != 0 || bz[m]) begin
        failures++;
        $display("cell %0d: %0d results missing", m, q[m].size());
      end
    end
    if (b2b == 0) failures++;
    $display("inputs %0d, back-to-back %0d", issued, b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
