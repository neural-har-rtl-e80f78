// stage1_extract: pipeline stage 1, feature extraction and max pooling.
//
// A 3x3, one-in one-out Conv2D (W_c0, "channel fusion") runs over the
// 30 x 28 micro-Doppler frame (Doppler bins x time steps), followed by 2x2
// max pooling down to 15 x 14. The conv is a conv_layer (one output pixel
// every 2 cycles), the pooling a maxpool2d. The network structure (Conv2D,
// then MaxPool2D) follows the published architecture; the kernel and pool
// sizes are this design's reconstruction.
//
// Interface: input one Q16.16 sample per beat, row-major (Doppler bin outer,
// time inner), 840 beats per frame. Output one word per beat, 210 beats per
// frame, in time-major order (see maxpool2d). Latency from the last input
// beat to the first output beat is about 2*H0*W0 cycles.
module stage1_extract
  import gatecnn_pkg::*;
#(
  parameter int unsigned H0 = gatecnn_pkg::N_H0,
  parameter int unsigned W0 = gatecnn_pkg::N_W0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data
);

  word_t cin_w  [1];
  word_t cout_w [1];
  logic  c_valid, c_ready;

  assign cin_w[0] = in_data;

  conv_layer #(
    .LAYER(L_C0), .CIN(1), .COUT(1), .H(H0), .W(W0), .KH(N_K2), .KW(N_K2),
    .RELU(1'b0), .IN_BW(1), .IN_SC(H0*W0), .IN_SH(W0), .IN_SW(1)
  ) u_c0 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(cin_w),
    .out_valid(c_valid), .out_ready(c_ready), .out_data(cout_w)
  );

  maxpool2d #(.H(H0), .W(W0)) u_pool (
    .clk, .rst_n,
    .in_valid(c_valid), .in_ready(c_ready), .in_data(cout_w[0]),
    .out_valid, .out_ready, .out_data
  );

endmodule
