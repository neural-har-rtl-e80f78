// gatecnn_top: GateCNN accelerator for radar human-activity recognition.
//
// One inference takes a 30 x 28 micro-Doppler frame (Doppler bins x 20 ms
// time steps, Q16.16) and returns 6 activity logits. The network is a
// shallow "dimension-gated" CNN: a Conv2D + max-pool front end, a Doppler
// embedding Conv1D, then a gate path (Conv1D along time) and a content path
// (Conv1D along time, then three Conv2Ds over the Doppler x time plane)
// whose results are multiplied, plus a residual, and finally an averaging
// Conv1D and a linear classifier. All weights are constants inside the
// design.
//
// Structure: five stages connected by valid/ready streams, each stage
// holding one frame, so that up to five frames can be in flight (frame-level
// dataflow pipeline):
//   stage1_extract  -> stage2_embed -> stage3_dual_path -> stage4_gate
//   -> stage5_output,  with the residual and gate streams of stage 3 going
//   straight to stage 4.
// axil_ctrl gives the host start/done/idle control over AXI-Lite.
//
// Interface: s_axis_* takes the frame, 840 beats, Doppler bin outer and time
// inner (TLAST is not used; the beat count defines the frame). Beats are
// accepted only while ap_start or auto_restart is set. m_axis_* returns the
// 6 logits, TLAST on the last. Clock: single clock, 100 MHz in the reference
// build; synchronous active-low reset.
// Timing at the default sizes: about 8,100 cycles from the first input beat
// to the last logit (81 us at 100 MHz), under the 107.5 us reported for the
// HLS build. With frames back to back, one leaves about every 5,100 cycles:
// the two large Conv2D layers of stage 3 (W_c3, W_c4, about 2,200 cycles
// each) each hold a single frame buffer and so take turns.
module gatecnn_top
  import gatecnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Stream input frame
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tlast,
  // AXI-Stream output logits
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tlast,
  // AXI-Lite control
  input  logic [4:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [4:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready
);

  localparam int unsigned NIN = N_H0*N_W0;

  logic        start_en, s1_in_ready;
  logic        frame_in, frame_out, busy;
  logic [15:0] in_beat;
  logic [3:0]  inflight;

  logic  s1_valid, s1_ready;
  word_t s1_data;
  logic  s2_valid, s2_ready;
  word_t s2_data  [N_D];
  logic  z_valid, z_ready, res_valid, res_ready, x5_valid, x5_ready;
  word_t z_data   [N_D];
  word_t res_data [N_D];
  word_t x5_data;
  logic  y_valid, y_ready;
  word_t y_data;

  // ---- input gating and frame bookkeeping ----
  assign s_axis_tready = start_en && s1_in_ready;
  assign frame_in      = s_axis_tvalid && s_axis_tready && (int'(in_beat) == NIN-1);
  assign frame_out     = m_axis_tvalid && m_axis_tready && m_axis_tlast;
  assign busy          = (in_beat != '0) || (inflight != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_beat  <= '0;
      inflight <= '0;
    end else begin
      if (s_axis_tvalid && s_axis_tready)
        in_beat <= frame_in ? '0 : in_beat + 1'b1;
      inflight <= inflight + 4'(frame_in) - 4'(frame_out);
    end
  end

  axil_ctrl u_ctrl (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .start_en, .frame_in, .frame_out, .busy
  );

  // ---- five-stage dataflow pipeline ----
  stage1_extract u_s1 (
    .clk, .rst_n,
    .in_valid(s_axis_tvalid && start_en), .in_ready(s1_in_ready),
    .in_data(word_t'(s_axis_tdata)),
    .out_valid(s1_valid), .out_ready(s1_ready), .out_data(s1_data)
  );

  stage2_embed u_s2 (
    .clk, .rst_n,
    .in_valid(s1_valid), .in_ready(s1_ready), .in_data(s1_data),
    .out_valid(s2_valid), .out_ready(s2_ready), .out_data(s2_data)
  );

  stage3_dual_path u_s3 (
    .clk, .rst_n,
    .in_valid(s2_valid), .in_ready(s2_ready), .in_data(s2_data),
    .z_valid, .z_ready, .z_data,
    .res_valid, .res_ready, .res_data,
    .x5_valid, .x5_ready, .x5_data
  );

  stage4_gate u_s4 (
    .clk, .rst_n,
    .z_valid, .z_ready, .z_data,
    .res_valid, .res_ready, .res_data,
    .x5_valid, .x5_ready, .x5_data,
    .y_valid, .y_ready, .y_data
  );

  stage5_output u_s5 (
    .clk, .rst_n,
    .y_valid, .y_ready, .y_data,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast
  );

  // TLAST of the input is informative only; the frame length is fixed
  logic unused_tlast;
  assign unused_tlast = s_axis_tlast;

endmodule
