// one_minus_tb: applies every gate value 0..255 and checks 1 - z in the gate
// format (1.0 = 128) one cycle later, with values above 1.0 clamped to 0.
`timescale 1ns/1ps
module one_minus_tb;
  import sser_pkg::*;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  u8_t z [N], y [N];
  one_minus #(.N(N)) dut (.clk, .z, .y);
  int checks = 0, failures = 0;

  initial begin
    #(10 * 400);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int v = 0; v < 256; v++) begin
      for (int i = 0; i < N; i++) z[i] = u8_t'((v + 64 * i) % 256);
      @(posedge clk);
      #1;
      for (int i = 0; i < N; i++) begin
        e = ((v + 64 * i) % 256 >= 128) ? 0 : 128 - (v + 64 * i) % 256;
        checks++;
        if (int'(y[i]) != e) begin
          failures++;
          if (failures < 10) $display("z=%0d: got %0d exp %0d", z[i], y[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
