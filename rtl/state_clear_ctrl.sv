// state_clear_ctrl: writes the initial hidden state H_0 = 0 into every pixel
// of the latent memory, after reset and whenever a new time window is
// started with clear_req.
//
// The method starts each time window from an initialised state H_0 and reads
// the final state H_n out when the window ends; the paper does not say how
// H_0 is written, so this controller is this design's own. It is a small
// state machine:
//   SWEEP  drives one zero write per cycle, addresses 0 .. DEPTH-1
//          (entered from reset, so the RAM never holds stale data);
//   IDLE   normal operation; clear_req moves to DRAIN;
//   DRAIN  waits until pipe_busy is low, so that no event still in flight
//          writes into the memory after it was cleared, then goes to SWEEP.
// busy is high in every state but IDLE; the layer refuses events and
// read-out requests while it is high. done pulses for one cycle at the end
// of each sweep. A sweep takes DEPTH cycles (16 384 for 128 x 128).
module state_clear_ctrl #(
  parameter int unsigned DEPTH  = sser_pkg::SENSOR_W * sser_pkg::SENSOR_H,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear_req,
  input  logic              pipe_busy,
  output logic              busy,
  output logic              clr_we,
  output logic [ADDR_W-1:0] clr_addr,
  output logic              done
);

  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_SWEEP} state_e;

  state_e state_q;
  logic [ADDR_W-1:0] addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_SWEEP;
      addr_q  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE:  if (clear_req) state_q <= S_DRAIN;
        S_DRAIN: if (!pipe_busy) begin
                   state_q <= S_SWEEP;
                   addr_q  <= '0;
                 end
        S_SWEEP: begin
                   addr_q <= addr_q + 1'b1;
                   if (addr_q == ADDR_W'(DEPTH - 1)) begin
                     state_q <= S_IDLE;
                     done    <= 1'b1;
                   end
                 end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state_q != S_IDLE);
  assign clr_we   = (state_q == S_SWEEP);
  assign clr_addr = addr_q;

endmodule
