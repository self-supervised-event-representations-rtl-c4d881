// act_lut_tb: sweeps all 256 pre-activation codes through a sigmoid and a
// tanh table and checks each result two register stages later against the
// real-valued function rounded to the output format; also spot-checks
// sigmoid(0) = 0.5, tanh(0) = 0 and the saturated ends.
`timescale 1ns/1ps
module act_lut_tb;
  import sser_pkg::*;
  import sser_ref_pkg::*;
  localparam int N = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  q8_t a [N];
  logic [7:0] ys [N], yt [N];
  act_lut #(.FUNC(ACT_SIGMOID), .N(N)) dut_s (.clk, .a, .y(ys));
  act_lut #(.FUNC(ACT_TANH),    .N(N)) dut_t (.clk, .a, .y(yt));
  int checks = 0, failures = 0;
  int es [258][N], et [258][N];

  initial begin
    #(10 * 400);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int got, int e, string what);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, e);
    end
  endtask

  initial begin
    for (int v = 0; v < 257; v++) begin
      if (v < 256)
        for (int i = 0; i < N; i++) begin
          a[i] = $signed(8'(v + 128 * i));
          es[v][i] = ref_sigmoid(int'(a[i]));
          et[v][i] = ref_tanh(int'(a[i]));
        end
      @(posedge clk);
      #1;
      if (v >= 1)
        for (int i = 0; i < N; i++) begin
          chk(int'(ys[i]), es[v-1][i], "sigmoid");
          chk(int'($signed(yt[i])), et[v-1][i], "tanh");
        end
    end
    // fixed points of the two functions
    a[0] = 8'sd0; a[1] = -8'sd128;
    repeat (2) @(posedge clk);
    #1;
    chk(int'(ys[0]), 64, "sigmoid(0)");
    chk(int'($signed(yt[0])), 0, "tanh(0)");
    chk(int'(ys[1]), 0, "sigmoid(-8)");
    chk(int'($signed(yt[1])), -128, "tanh(-8)");
    a[0] = 8'sd127;
    repeat (2) @(posedge clk);
    #1;
    chk(int'(ys[0]), 128, "sigmoid(7.94)");
    chk(int'($signed(yt[0])), 127, "tanh(7.94)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
