// state_mem: the per-pixel hidden-state store ("latent memory") of one
// recurrent layer: DEPTH = W x H words of D_OUT x 8 bits, one word per pixel.
//
// In the paper each recurrent layer owns such a block, sized
// W x H x d_out x precision bits and mapped onto block RAM; for the 128 x 128
// x 12 x 8-bit configuration that is 1.5 Mbit (48 BRAM36 blocks). This model
// is a simple dual-port RAM written as an array so that synthesis infers
// block RAM:
//   write port: wr_en, wr_addr, wr_data, committed at the clock edge;
//   read port:  rd_en, rd_addr; rd_data is valid two cycles later (address
//               register + output register, as a BRAM with its output
//               register enabled). A read and a write to the same address in
//               the same cycle return the old word (read-first).
// The RAM is not reset; the clear controller writes H_0 into it. The port
// arrangement and read latency are this design's choices.
module state_mem
  import sser_pkg::*;
#(
  parameter int unsigned DEPTH  = SENSOR_W * SENSOR_H,
  parameter int unsigned D      = D_OUT,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  q8_t               wr_data [D],
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output q8_t               rd_data [D]
);

  typedef logic [D*DATA_W-1:0] word_t;

  word_t mem [DEPTH];
  word_t rd_q;
  word_t wr_word;

  always_comb
    for (int c = 0; c < D; c++)
      wr_word[c*DATA_W +: DATA_W] = wr_data[c];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_word;

  always_ff @(posedge clk)
    if (rd_en) rd_q <= mem[rd_addr];

  always_ff @(posedge clk)
    for (int c = 0; c < D; c++)
      rd_data[c] <= rd_q[c*DATA_W +: DATA_W];

endmodule
