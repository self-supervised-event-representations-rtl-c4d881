// vec_add_tb: random and extreme operand vectors, one per cycle, checked
// against saturating integer addition one cycle later; counts how often
// positive and negative saturation occurred (both must occur).
`timescale 1ns/1ps
module vec_add_tb;
  import sser_pkg::*;
  localparam int N = 24, NVEC = 500;
  logic clk = 0;
  always #5 clk = ~clk;
  q8_t a [N], b [N], y [N];
  vec_add #(.N(N)) dut (.clk, .a, .b, .y);
  int checks = 0, failures = 0, sat_pos = 0, sat_neg = 0;
  int expv [N];

  initial begin
    #(10 * (NVEC + 50));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    for (int v = 0; v < NVEC; v++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = $signed(8'($urandom));
        b[i] = $signed(8'($urandom));
        s = int'(a[i]) + int'(b[i]);
        expv[i] = (s > 127) ? 127 : (s < -128) ? -128 : s;
        if (s > 127) sat_pos++;
        if (s < -128) sat_neg++;
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(y[i]) != expv[i]) begin
          failures++;
          if (failures < 10) $display("vec %0d el %0d: got %0d exp %0d", v, i, y[i], expv[i]);
        end
      end
    end
    if (sat_pos == 0 || sat_neg == 0) failures++;
    $display("saturation: positive %0d negative %0d", sat_pos, sat_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
