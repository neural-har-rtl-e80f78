// stage3_dual_path: pipeline stage 3, the two parallel paths of the gated
// convolution.
//
// The embedded sequence X_conv1 (D channels x WP time steps) feeds three
// consumers at once:
//   gate path     Z = ReLU(W_g * X_conv1), a Conv1D along time (D -> D);
//   content path  X_conv2 = W_p * X_conv1 (Conv1D along time, D -> D),
//                 reshaped to a one-channel D x WP image, then
//                 X_conv3 = ReLU(W_c2 * X_conv2)  Conv2D 1 -> D,
//                 X_conv4 = ReLU(W_c3 * X_conv3)  Conv2D D -> D,
//                 X_conv5 = W_c4 * X_conv4        Conv2D D -> 1;
//   residual      X_conv1 itself, passed on for stage 4.
// The layer chain follows the published architecture. The 3-tap time
// kernels and 3x3 Conv2D kernels are this design's reconstruction, and so is
// placing the gate's ReLU at the gate Conv1D output (the published block
// diagram draws Conv1D then ReLU on that path).
//
// The reshape X_conv2 -> image needs no data movement: W_p emits one beat of
// D words per time step, which lands in the W_c2 frame buffer at address
// t*D + d, and W_c2 reads pixel (h = d, w = t) with strides 1 and D.
//
// Interface: input one beat of D words per time step (WP beats). The input
// is broadcast: a beat moves only when the gate conv, the content conv and
// the residual output all take it. Outputs: z (D-word beats, time order),
// res (D-word beats, time order) and x5 (one word per beat, Doppler-major:
// d outer, t inner). The W_c3 and W_c4 layers dominate the run time:
// D*WP*(D+1) cycles each.
module stage3_dual_path
  import gatecnn_pkg::*;
#(
  parameter int unsigned D  = gatecnn_pkg::N_D,
  parameter int unsigned WP = gatecnn_pkg::N_WP,
  parameter int unsigned KT = gatecnn_pkg::N_KT,
  parameter int unsigned K2 = gatecnn_pkg::N_K2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data  [D],
  output logic  z_valid,
  input  logic  z_ready,
  output word_t z_data   [D],
  output logic  res_valid,
  input  logic  res_ready,
  output word_t res_data [D],
  output logic  x5_valid,
  input  logic  x5_ready,
  output word_t x5_data
);

  logic  g_ready, p_ready;
  logic  p_valid, c2_valid, c3_valid;
  logic  c2_ready, c3_ready, c4_ready;
  word_t p_data  [D];
  word_t c2_data [D];
  word_t c3_data [D];
  word_t c4_data [1];

  // three-way broadcast of the input stream
  assign in_ready  = g_ready && p_ready && res_ready;
  assign res_valid = in_valid && g_ready && p_ready;
  assign res_data  = in_data;

  conv_layer #(
    .LAYER(L_G), .CIN(D), .COUT(D), .H(1), .W(WP), .KH(1), .KW(KT),
    .RELU(1'b1), .IN_BW(D), .IN_SC(1), .IN_SH(D*WP), .IN_SW(D)
  ) u_gate (
    .clk, .rst_n,
    .in_valid(in_valid && p_ready && res_ready), .in_ready(g_ready), .in_data,
    .out_valid(z_valid), .out_ready(z_ready), .out_data(z_data)
  );

  conv_layer #(
    .LAYER(L_P), .CIN(D), .COUT(D), .H(1), .W(WP), .KH(1), .KW(KT),
    .RELU(1'b0), .IN_BW(D), .IN_SC(1), .IN_SH(D*WP), .IN_SW(D)
  ) u_p (
    .clk, .rst_n,
    .in_valid(in_valid && g_ready && res_ready), .in_ready(p_ready), .in_data,
    .out_valid(p_valid), .out_ready(c2_ready), .out_data(p_data)
  );

  conv_layer #(
    .LAYER(L_C2), .CIN(1), .COUT(D), .H(D), .W(WP), .KH(K2), .KW(K2),
    .RELU(1'b1), .IN_BW(D), .IN_SC(D*WP), .IN_SH(1), .IN_SW(D)
  ) u_c2 (
    .clk, .rst_n,
    .in_valid(p_valid), .in_ready(c2_ready), .in_data(p_data),
    .out_valid(c2_valid), .out_ready(c3_ready), .out_data(c2_data)
  );

  conv_layer #(
    .LAYER(L_C3), .CIN(D), .COUT(D), .H(D), .W(WP), .KH(K2), .KW(K2),
    .RELU(1'b1), .IN_BW(D), .IN_SC(1), .IN_SH(WP*D), .IN_SW(D)
  ) u_c3 (
    .clk, .rst_n,
    .in_valid(c2_valid), .in_ready(c3_ready), .in_data(c2_data),
    .out_valid(c3_valid), .out_ready(c4_ready), .out_data(c3_data)
  );

  conv_layer #(
    .LAYER(L_C4), .CIN(D), .COUT(1), .H(D), .W(WP), .KH(K2), .KW(K2),
    .RELU(1'b0), .IN_BW(D), .IN_SC(1), .IN_SH(WP*D), .IN_SW(D)
  ) u_c4 (
    .clk, .rst_n,
    .in_valid(c3_valid), .in_ready(c4_ready), .in_data(c3_data),
    .out_valid(x5_valid), .out_ready(x5_ready), .out_data(c4_data)
  );

  assign x5_data = c4_data[0];

endmodule
