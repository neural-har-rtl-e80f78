// stage5_output: pipeline stage 5, the classification head.
//
// v = W_avg * Y is a kernel-size-1 Conv1D that treats the D Doppler rows of
// Y as input channels and reduces them to one value per time step (the
// "learned averaging convolution along the Doppler dimension"). The WP
// values of v then go through the fully connected layer W_cls (+ b_cls) to
// NCLS = 6 logits. Both are conv_layer instances; the logits beat is then
// sent word by word on an AXI-Stream master, TLAST on the last logit.
// The output is the raw Q16.16 logits; picking the class (argmax) is left
// to the host, since the network's output is defined as logits.
//
// Interface: input one word of Y per beat in Doppler-major order (d outer,
// t inner), D*WP beats. Output NCLS AXI-Stream beats per frame.
// Timing: WP*(D+1) cycles for the averaging layer, WP+1 for the classifier,
// then NCLS output beats.
module stage5_output
  import gatecnn_pkg::*;
#(
  parameter int unsigned D    = gatecnn_pkg::N_D,
  parameter int unsigned WP   = gatecnn_pkg::N_WP,
  parameter int unsigned NCLS = gatecnn_pkg::N_NCLS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        y_valid,
  output logic        y_ready,
  input  word_t       y_data,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tlast
);

  localparam int unsigned CW = (NCLS > 1) ? $clog2(NCLS) : 1;

  word_t y_w   [1];
  word_t v_w   [1];
  word_t lg_w  [NCLS];
  word_t hold  [NCLS];
  logic  v_valid, v_ready, lg_valid, lg_ready;
  logic  busy;
  logic [CW-1:0] idx;

  assign y_w[0] = y_data;

  conv_layer #(
    .LAYER(L_AVG), .CIN(D), .COUT(1), .H(1), .W(WP), .KH(1), .KW(1),
    .RELU(1'b0), .IN_BW(1), .IN_SC(WP), .IN_SH(D*WP), .IN_SW(1)
  ) u_avg (
    .clk, .rst_n,
    .in_valid(y_valid), .in_ready(y_ready), .in_data(y_w),
    .out_valid(v_valid), .out_ready(v_ready), .out_data(v_w)
  );

  conv_layer #(
    .LAYER(L_CLS), .CIN(WP), .COUT(NCLS), .H(1), .W(1), .KH(1), .KW(1),
    .RELU(1'b0), .IN_BW(1), .IN_SC(1), .IN_SH(WP), .IN_SW(WP)
  ) u_cls (
    .clk, .rst_n,
    .in_valid(v_valid), .in_ready(v_ready), .in_data(v_w),
    .out_valid(lg_valid), .out_ready(lg_ready), .out_data(lg_w)
  );

  // serialiser: one logit per AXI-Stream beat
  assign lg_ready      = !busy;
  assign m_axis_tvalid = busy;
  assign m_axis_tdata  = hold[idx];
  assign m_axis_tlast  = busy && (int'(idx) == NCLS-1);

  always_ff @(posedge clk) begin
    if (lg_valid && lg_ready) hold <= lg_w;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
    end else if (lg_valid && lg_ready) begin
      busy <= 1'b1;
      idx  <= '0;
    end else if (m_axis_tvalid && m_axis_tready) begin
      if (int'(idx) == NCLS-1) begin
        busy <= 1'b0;
        idx  <= '0;
      end else begin
        idx <= idx + 1'b1;
      end
    end
  end

endmodule
