// state_clear_ctrl_tb: checks, on a 64-word memory, that reset starts a
// sweep writing addresses 0..63 once each in consecutive cycles, that done
// pulses once at its end, that a clear request waits while pipe_busy is high
// (drain) and then sweeps again, and that busy covers the whole operation.
`timescale 1ns/1ps
module state_clear_ctrl_tb;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, clear_req, pipe_busy, busy, clr_we, done;
  logic [AW-1:0] clr_addr;
  state_clear_ctrl #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .clear_req, .pipe_busy,
                                         .busy, .clr_we, .clr_addr, .done);
  int checks = 0, failures = 0;

  initial begin
    #(10 * 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Counts zero-writes until the sweep ends; checks order and the done pulse.
  task automatic expect_sweep();
    for (int a = 0; a < DEPTH; a++) begin
      chk(busy && clr_we && clr_addr == AW'(a), $sformatf("sweep write %0d", a));
      chk(!done, "done early");
      @(posedge clk); #1;
    end
    chk(done && !busy && !clr_we, "done pulse and idle after sweep");
    @(posedge clk); #1;
    chk(!done, "done is a single pulse");
  endtask

  initial begin
    rst_n = 0; clear_req = 0; pipe_busy = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;   // the sweep starts straight out of reset
    #1;
    expect_sweep();
    repeat (5) begin
      @(posedge clk); #1;
      chk(!busy && !clr_we, "idle stays idle");
    end
    // clear request while the pipeline is busy: drain first
    pipe_busy = 1;
    clear_req = 1;
    @(posedge clk); #1;
    clear_req = 0;
    repeat (10) begin
      chk(busy && !clr_we, "drain waits for the pipeline");
      @(posedge clk); #1;
    end
    pipe_busy = 0;
    @(posedge clk); #1;
    expect_sweep();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
