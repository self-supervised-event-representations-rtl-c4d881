// gru_cell: pipelined, quantised recurrent update h_new = f(x, h_prev) of one
// GRU (or MGU) layer, built from the operator blocks.
//
// GRU (the paper's main model):
//   z  = sigmoid(W_z x + U_z h + b_z)
//   r  = sigmoid(W_r x + U_r h + b_r)
//   h~ = tanh(W_h x + r * (U_h h + b_h))
//   h' = (1 - z) * h + z * h~
// MGU (CELL = CELL_MGU): one forget gate f takes the place of both z and r,
// and the merged multipliers shrink from 3*D to 2*D outputs; the schedule,
// and so the latency, stays the same, as the paper notes.
//
// Schedule (k = cycles after x / h_prev are presented):
//   k=2   linear_mac x2   wx = W x,  uh = U h + b       (multiply, requant)
//   k=3   vec_add         gate pre-activations  wx_g + uh_g
//   k=5   act_lut         z, r = sigmoid(.)              (2-cycle ROM)
//   k=6   one_minus       1 - z
//   k=7   vec_mul         r * uh_h                       (multiply, requant)
//   k=8   vec_add         wx_h + r * uh_h
//   k=10  act_lut         h~ = tanh(.)
//   k=12  vec_mul         z * h~ and (1 - z) * h_prev    (one 2*D unit)
//   k=13  vec_add         h_new
// so out_valid / out_tag / h_new follow in_valid by LATENCY = 13 cycles, and
// a new input can be presented every cycle. Operands needed later are carried
// in delay registers. in_tag is an opaque word carried alongside (the layer
// uses it for the pixel address).
//
// Weight layout: rows of wx, uh and b are gate-major: for the GRU rows
// [0,D) are z, [D,2D) r, [2D,3D) the candidate h~; for the MGU rows [0,D)
// are f and [D,2D) the candidate; rows beyond G*D are ignored. wx holds the
// input weights (D_IN columns), uh the recurrent weights (D columns), b the
// biases, all signed 8 bit (formats in sser_pkg).
//
// From the paper: the equations, the five operator kinds, merged 3*d_out
// multipliers, 1+1 cycles per multiplier stage, LUT activations. This
// design's choice: the exact stage order and the 2-cycle activation ROMs,
// picked so that together with the memory read and write-back in the layer
// the per-event latency is the paper's 16 cycles.
module gru_cell
  import sser_pkg::*;
#(
  parameter cell_e       CELL    = CELL_GRU,
  parameter int unsigned D       = D_OUT,
  parameter int unsigned D_IN    = 2,
  parameter int unsigned IN_W    = X0_W,
  parameter int unsigned IN_FRAC = X0_FRAC,
  parameter int unsigned TAG_W   = 14
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [TAG_W-1:0]       in_tag,
  input  logic signed [IN_W-1:0] x      [D_IN],
  input  q8_t                    h_prev [D],
  input  q8_t                    wx     [3*D][D_IN],
  input  q8_t                    wh     [3*D][D],
  input  q8_t                    b      [3*D],
  output logic                   out_valid,
  output logic [TAG_W-1:0]       out_tag,
  output q8_t                    h_new  [D],
  output logic                   busy
);

  localparam int unsigned G       = n_gates(CELL);  // 3 (GRU) or 2 (MGU)
  localparam int unsigned NG      = (G - 1) * D;    // gate rows: z,r or f
  localparam int unsigned CELL_LAT = 13;
  localparam int unsigned HBASE   = NG;             // first candidate row

  // ---------------------------------------------------------------- k = 2
  q8_t wx_g [G*D][D_IN];
  q8_t wh_g [G*D][D];
  q8_t b_g  [G*D];
  q8_t b0   [G*D];
  q8_t wxv  [G*D];
  q8_t uhv  [G*D];

  always_comb begin
    for (int o = 0; o < G*D; o++) begin
      wx_g[o] = wx[o];
      wh_g[o] = wh[o];
      b_g[o]  = b[o];
      b0[o]   = '0;
    end
  end

  // Input weights carry no bias: in the GRU the candidate's bias b_h sits
  // inside the reset-gate product, so all biases go with the U h path.
  linear_mac #(.N_OUT(G*D), .N_IN(D_IN), .IN_W(IN_W), .IN_FRAC(IN_FRAC),
               .OUT_FRAC(A_FRAC))
    u_lin_x (.clk, .x(x), .w(wx_g), .b(b0), .y(wxv));

  linear_mac #(.N_OUT(G*D), .N_IN(D), .IN_W(DATA_W), .IN_FRAC(H_FRAC),
               .OUT_FRAC(A_FRAC))
    u_lin_h (.clk, .x(h_prev), .w(wh_g), .b(b_g), .y(uhv));

  // ---------------------------------------------------------------- k = 3
  q8_t wx_gate [NG];
  q8_t uh_gate [NG];
  q8_t pre_g   [NG];
  always_comb
    for (int i = 0; i < NG; i++) begin
      wx_gate[i] = wxv[i];
      uh_gate[i] = uhv[i];
    end

  vec_add #(.N(NG)) u_add_gate (.clk, .a(wx_gate), .b(uh_gate), .y(pre_g));

  // Candidate parts of the products, carried to where they are used:
  // uh_h to k=5 (reset-gate product), wx_h to k=7 (candidate sum).
  q8_t uh_h_d [3][D];
  q8_t wx_h_d [5][D];
  always_ff @(posedge clk) begin
    for (int i = 0; i < D; i++) begin
      uh_h_d[0][i] <= uhv[HBASE + i];
      wx_h_d[0][i] <= wxv[HBASE + i];
    end
    for (int s = 1; s < 3; s++) uh_h_d[s] <= uh_h_d[s-1];
    for (int s = 1; s < 5; s++) wx_h_d[s] <= wx_h_d[s-1];
  end

  // ---------------------------------------------------------------- k = 5
  logic [DATA_W-1:0] gate_raw [NG];
  act_lut #(.FUNC(ACT_SIGMOID), .N(NG)) u_sigmoid (.clk, .a(pre_g), .y(gate_raw));

  u8_t z_g [D];   // update gate (GRU) or forget gate (MGU)
  u8_t r_g [D];   // reset gate (GRU) or, again, the forget gate (MGU)
  always_comb
    for (int i = 0; i < D; i++) begin
      z_g[i] = gate_raw[i];
      r_g[i] = (CELL == CELL_GRU) ? gate_raw[(G-2)*D + i] : gate_raw[i];
    end

  // ---------------------------------------------------------------- k = 6, 7
  u8_t zc [D];
  one_minus #(.N(D)) u_one_minus (.clk, .z(z_g), .y(zc));

  q8_t r_uh [D];
  vec_mul #(.N(D), .SHIFT(H_FRAC)) u_mul_r (.clk, .g(r_g), .v(uh_h_d[2]), .y(r_uh));

  // ---------------------------------------------------------------- k = 8
  q8_t pre_h [D];
  vec_add #(.N(D)) u_add_h (.clk, .a(wx_h_d[4]), .b(r_uh), .y(pre_h));

  // ---------------------------------------------------------------- k = 10
  logic [DATA_W-1:0] htil_raw [D];
  act_lut #(.FUNC(ACT_TANH), .N(D)) u_tanh (.clk, .a(pre_h), .y(htil_raw));

  // z from k=5 and 1-z from k=6 carried to k=10; h_prev from k=0 to k=10.
  u8_t z_d  [5][D];
  u8_t zc_d [4][D];
  q8_t hp_d [10][D];
  always_ff @(posedge clk) begin
    z_d[0]  <= z_g;
    zc_d[0] <= zc;
    hp_d[0] <= h_prev;
    for (int s = 1; s < 5;  s++) z_d[s]  <= z_d[s-1];
    for (int s = 1; s < 4;  s++) zc_d[s] <= zc_d[s-1];
    for (int s = 1; s < 10; s++) hp_d[s] <= hp_d[s-1];
  end

  // ---------------------------------------------------------------- k = 12
  u8_t mix_g [2*D];
  q8_t mix_v [2*D];
  q8_t mix_p [2*D];
  always_comb
    for (int i = 0; i < D; i++) begin
      mix_g[i]     = z_d[4][i];
      mix_v[i]     = q8_t'(htil_raw[i]);
      mix_g[D + i] = zc_d[3][i];
      mix_v[D + i] = hp_d[9][i];
    end

  vec_mul #(.N(2*D), .SHIFT(H_FRAC)) u_mul_mix (.clk, .g(mix_g), .v(mix_v), .y(mix_p));

  // ---------------------------------------------------------------- k = 13
  q8_t mix_a [D];
  q8_t mix_b [D];
  always_comb
    for (int i = 0; i < D; i++) begin
      mix_a[i] = mix_p[i];
      mix_b[i] = mix_p[D + i];
    end

  vec_add #(.N(D)) u_add_out (.clk, .a(mix_a), .b(mix_b), .y(h_new));

  // ------------------------------------------------- valid and tag pipeline
  logic [CELL_LAT-1:0] vld_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[CELL_LAT-2:0], in_valid};

  pipe_delay #(.W(TAG_W), .N(CELL_LAT)) u_tag (.clk, .d(in_tag), .q(out_tag));

  assign out_valid = vld_q[CELL_LAT-1];
  assign busy      = |vld_q;

endmodule
