// stage2_embed: pipeline stage 2, Doppler-aligned Conv1D (Doppler vector
// embedding).
//
// Each pooled time step is a vector of HP Doppler bins. A kernel-size-1
// Conv1D (W_c1) maps that vector to D features, so every output channel
// sees the whole Doppler column of a single time instant, as the published
// architecture describes. Built from one conv_layer: HP cycles of D parallel
// MACs plus one output cycle per time step.
//
// Interface: input one word per beat, HP*WP beats in time-major order (the
// HP bins of time 0, then of time 1, ...). Output one beat of D words per
// time step, WP beats. D = 12 is this design's reconstruction.
module stage2_embed
  import gatecnn_pkg::*;
#(
  parameter int unsigned D  = gatecnn_pkg::N_D,
  parameter int unsigned HP = gatecnn_pkg::N_HP,
  parameter int unsigned WP = gatecnn_pkg::N_WP
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data [D]
);

  word_t in_w [1];
  assign in_w[0] = in_data;

  conv_layer #(
    .LAYER(L_C1), .CIN(HP), .COUT(D), .H(1), .W(WP), .KH(1), .KW(1),
    .RELU(1'b0), .IN_BW(1), .IN_SC(1), .IN_SH(HP*WP), .IN_SW(HP)
  ) u_c1 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_w),
    .out_valid, .out_ready, .out_data
  );

endmodule
