// axil_ctrl: AXI4-Lite control and status slave of the accelerator.
//
// The host processor reaches the accelerator over AXI-Lite; the published
// system shows only that link, so the register map here is this design's
// own, modelled on the usual HLS block-level control register:
//   0x00 CTRL  bit0 ap_start     write 1 to let one input frame in; reads 1
//                                until the last beat of that frame is taken
//              bit1 ap_done      set when a frame's last logit has left;
//                                cleared by reading CTRL
//              bit2 ap_idle      no frame inside the accelerator
//              bit7 auto_restart keep accepting frames without ap_start
//   0x10 COUNT number of completed inferences (read only)
// Writes take the address and data channels together (both valid in the
// same cycle) and answer OKAY; reads answer in the cycle after ARVALID.
// start_en tells the stream input that it may accept beats.
module axil_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  input  logic        s_axil_rready,
  // accelerator side
  output logic        start_en,
  input  logic        frame_in,   // last input beat of a frame accepted
  input  logic        frame_out,  // last output beat of a frame sent
  input  logic        busy        // a frame is inside the accelerator
);

  localparam logic [4:0] A_CTRL  = 5'h00;
  localparam logic [4:0] A_COUNT = 5'h10;

  logic        ap_start, ap_done, auto_restart;
  logic [31:0] count;
  logic        wr_fire, rd_fire;

  assign s_axil_awready = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_wready  = s_axil_awready;
  assign wr_fire        = s_axil_awready;
  assign s_axil_arready = !s_axil_rvalid;
  assign rd_fire        = s_axil_arvalid && s_axil_arready;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign start_en       = ap_start || auto_restart;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ap_start      <= 1'b0;
      ap_done       <= 1'b0;
      auto_restart  <= 1'b0;
      count         <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      // frame bookkeeping
      if (frame_in) ap_start <= 1'b0;
      if (frame_out) count <= count + 1'b1;

      // write channel
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        if (s_axil_awaddr == A_CTRL && s_axil_wstrb[0]) begin
          if (s_axil_wdata[0]) ap_start <= 1'b1;
          auto_restart <= s_axil_wdata[7];
        end
      end else if (s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end

      // read channel
      if (rd_fire) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr)
          A_CTRL:  s_axil_rdata <= {24'd0, auto_restart, 4'd0, !busy, ap_done, ap_start};
          A_COUNT: s_axil_rdata <= count;
          default: s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end

      // done: set by a finished frame, cleared by reading CTRL
      if (frame_out)                              ap_done <= 1'b1;
      else if (rd_fire && s_axil_araddr == A_CTRL) ap_done <= 1'b0;
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
