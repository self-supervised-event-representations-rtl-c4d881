// state_mem_tb: random writes and reads against a reference array on a small
// memory (DEPTH = 256, D = 12), checking the two-cycle read latency, that
// rd_en low holds the read register, and read-first behaviour when a read
// and a write hit the same address in one cycle.
`timescale 1ns/1ps
module state_mem_tb;
  import sser_pkg::*;
  localparam int DEPTH = 256, D = 12, AW = 8, NOPS = 3000;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  q8_t wr_data [D], rd_data [D];
  state_mem #(.DEPTH(DEPTH), .D(D)) dut (.clk, .wr_en, .wr_addr, .wr_data,
                                          .rd_en, .rd_addr, .rd_data);
  int checks = 0, failures = 0, collisions = 0;
  int model [DEPTH][D];
  int exp1 [D], exp2 [D];
  logic pend1, pend2;

  initial begin
    #(10 * (NOPS + DEPTH + 100));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill the memory with known contents
    rd_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = AW'(a);
      for (int c = 0; c < D; c++) begin
        wr_data[c] = $signed(8'($urandom));
        model[a][c] = int'(wr_data[c]);
      end
      @(posedge clk); #1;
    end
    pend1 = 0; pend2 = 0;
    for (int k = 0; k < NOPS; k++) begin
      wr_en = ($urandom % 2) == 1;
      rd_en = ($urandom % 4) != 0;
      rd_addr = AW'($urandom % 16);   // small range so collisions happen
      wr_addr = (k % 5 == 0) ? rd_addr : AW'($urandom % 16);
      for (int c = 0; c < D; c++) wr_data[c] = $signed(8'($urandom));
      if (wr_en && rd_en && wr_addr == rd_addr) collisions++;
      // what this read must return: the contents before this cycle's write
      if (rd_en) for (int c = 0; c < D; c++) exp1[c] = model[rd_addr][c];
      @(posedge clk); #1;
      if (wr_en) for (int c = 0; c < D; c++) model[wr_addr][c] = int'(wr_data[c]);
      // rd_data now shows the read issued two edges ago
      if (pend2) for (int c = 0; c < D; c++) begin
        checks++;
        if (int'(rd_data[c]) != exp2[c]) begin
          failures++;
          if (failures < 10) $display("op %0d ch %0d: got %0d exp %0d", k, c, rd_data[c], exp2[c]);
        end
      end
      if (rd_en) exp2 = exp1;
      pend2 = rd_en || pend2;
    end
    if (collisions == 0) failures++;
    $display("read/write collisions: %0d", collisions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
