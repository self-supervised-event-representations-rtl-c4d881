// vec_mul_tb: streams random gate (0..128 plus out-of-range values up to
// 255) and signed operand vectors, one per cycle, and checks the rounded,
// saturated products two register stages later against an integer
// reference.
`timescale 1ns/1ps
module vec_mul_tb;
  import sser_pkg::*;
  import sser_ref_pkg::*;
  localparam int N = 24, NVEC = 500;
  logic clk = 0;
  always #5 clk = ~clk;
  u8_t g [N];
  q8_t v [N], y [N];
  vec_mul #(.N(N), .SHIFT(H_FRAC)) dut (.clk, .g, .v, .y);
  int checks = 0, failures = 0, sat_hits = 0;
  int expv [NVEC][N];

  initial begin
    #(10 * (NVEC + 50));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k <= NVEC; k++) begin
      if (k < NVEC)
        for (int i = 0; i < N; i++) begin
          g[i] = (k % 4 == 0) ? u8_t'($urandom) : u8_t'($urandom % 129);
          v[i] = $signed(8'($urandom));
          expv[k][i] = ref_requant(longint'(g[i]) * longint'(v[i]), 7);
          if (expv[k][i] == 127 || expv[k][i] == -128) sat_hits++;
        end
      @(posedge clk);
      #1;
      if (k >= 1)
        for (int i = 0; i < N; i++) begin
          checks++;
          if (int'(y[i]) != expv[k-1][i]) begin
            failures++;
            if (failures < 10) $display("vec %0d el %0d: got %0d exp %0d", k-1, i, y[i], expv[k-1][i]);
          end
        end
    end
    if (sat_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
