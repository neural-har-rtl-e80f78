// tb_gatecnn_top: end-to-end test of the accelerator at its default sizes.
//
// Frame 0 is started with ap_start over AXI-Lite; the test checks the
// logits against gatecnn_ref_pkg::model, the latency from first input beat
// to last logit (must stay under the 10,750 cycles = 107.5 us at 100 MHz
// reported for the reference build) and the CTRL/COUNT registers
// (ap_start self-clear, ap_done clear-on-read, ap_idle). Frames 1..5 then run
// back to back in auto-restart mode, which makes the stages work on
// different frames at once; frames 1 and 2 see random output back-pressure,
// and the interval between the last two results must meet the reported
// 9.3 k inferences/s (10,752 cycles at 100 MHz).
// Mechanisms counted, each of which must occur: input held off while not
// started, output back-pressure, several frames in flight, gate and content
// paths computing in the same cycle, the gate closing (ReLU(Z) = 0) and
// an output of the content Conv2Ds clipped by ReLU.
module tb_gatecnn_top;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;

  localparam int NF = 6;
  localparam int NIN = 30*28;

  logic        clk = 0, rst_n = 0;
  logic        s_axis_tvalid, s_axis_tready, s_axis_tlast;
  logic [31:0] s_axis_tdata;
  logic        m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [31:0] m_axis_tdata;
  logic [4:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;

  gatecnn_top dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  vec_t   frames [NF];
  trace_t tr     [NF];
  int     first_in_cyc [NF];
  int     last_out_cyc [NF];
  bit     out_stall = 0;
  bit     done_rx = 0;

  // mechanism counters
  int n_gated_off = 0, n_out_stall = 0, n_overlap = 0, n_dual = 0;
  int n_gate_closed = 0, n_relu_clip = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  task automatic check_eq(input longint got, input longint want, input string what);
    checks++;
    if (got != want) fail($sformatf("%s: got %0d want %0d", what, got, want));
  endtask

  // ---- AXI-Lite master ----
  task automatic axil_write(input logic [4:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    s_axil_wstrb = 4'hF; s_axil_bready = 1;
    while (!s_axil_awready) @(negedge clk);
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    checks++;
    if (s_axil_bresp != 2'b00) fail("bresp");
    @(negedge clk);
  endtask

  task automatic axil_read(input logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1; s_axil_rready = 1;
    while (!s_axil_arready) @(negedge clk);
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk);
  endtask

  // ---- stream source: all frames, one after another ----
  task automatic send_frame(input int f);
    for (int i = 0; i < NIN; i++) begin
      @(negedge clk);
      s_axis_tvalid = 1;
      s_axis_tdata  = 32'(frames[f][i]);
      s_axis_tlast  = (i == NIN-1);
      while (!s_axis_tready) @(negedge clk);
      if (i == 0) first_in_cyc[f] = cyc;
    end
    @(negedge clk);
    s_axis_tvalid = 0;
    s_axis_tlast  = 0;
  endtask

  // ---- stream sink ----
  initial begin
    int f = 0, k = 0;
    m_axis_tready = 0;
    while (f < NF) begin
      @(negedge clk);
      m_axis_tready = (out_stall && f <= 2) ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (m_axis_tvalid && m_axis_tready) begin
        check_eq(longint'($signed(m_axis_tdata)), tr[f].logits[k], $sformatf("frame %0d logit %0d", f, k));
        checks++;
        if (m_axis_tlast != (k == N_NCLS-1)) fail("tlast");
        if (k == N_NCLS-1) begin
          last_out_cyc[f] = cyc;
          k = 0;
          f++;
        end else k++;
      end
    end
    @(negedge clk);
    m_axis_tready = 0;
    done_rx = 1;
  end

  // ---- mechanism monitors ----
  always @(posedge clk) if (rst_n) begin
    if (s_axis_tvalid && !dut.start_en) n_gated_off++;
    if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
    if (dut.inflight >= 2 || (dut.inflight >= 1 && dut.in_beat != 0)) n_overlap++;
    if (int'(dut.u_s3.u_gate.state) == 1 && int'(dut.u_s3.u_p.state) == 1) n_dual++;
  end

  initial begin
    logic [31:0] r;
    int lat;
    s_axis_tvalid = 0; s_axis_tdata = 0; s_axis_tlast = 0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_arvalid = 0;
    s_axil_bready = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    for (int f = 0; f < NF; f++) begin
      frames[f] = random_frame(NIN);
      tr[f] = model(frames[f]);
      foreach (tr[f].z[i])   if (tr[f].z[i] == 0)   n_gate_closed++;
      foreach (tr[f].xc4[i]) if (tr[f].xc4[i] == 0) n_relu_clip++;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;

    // idle after reset, nothing accepted before ap_start
    axil_read(5'h00, r);
    check_eq(r[2], 1, "ap_idle after reset");
    check_eq(r[0], 0, "ap_start after reset");
    @(negedge clk);
    s_axis_tvalid = 1;
    s_axis_tdata  = 32'(frames[0][0]);
    repeat (5) begin
      @(negedge clk);
      checks++;
      if (s_axis_tready) fail("input accepted before ap_start");
    end

    // frame 0: single shot, full-speed output
    fork
      axil_write(5'h00, 32'h1);
      send_frame(0);
    join
    axil_read(5'h00, r);
    check_eq(r[0], 0, "ap_start clears after the frame is taken");
    check_eq(r[2], 0, "not idle while computing");
    wait (last_out_cyc[0] != 0);
    repeat (2) @(posedge clk);
    lat = last_out_cyc[0] - first_in_cyc[0];
    $display("frame 0 latency: %0d cycles (%0.1f us at 100 MHz)", lat, lat / 100.0);
    checks++;
    if (lat > 10750) fail($sformatf("latency %0d cycles exceeds 10750", lat));
    axil_read(5'h00, r);
    check_eq(r[1], 1, "ap_done");
    check_eq(r[2], 1, "ap_idle after the frame");
    axil_read(5'h00, r);
    check_eq(r[1], 0, "ap_done cleared by read");
    axil_read(5'h10, r);
    check_eq(r, 1, "COUNT after one frame");

    // frames 1..NF-1: auto-restart, back to back, output back-pressure
    out_stall = 1;
    axil_write(5'h00, 32'h80);
    for (int f = 1; f < NF; f++) send_frame(f);
    wait (done_rx);
    axil_write(5'h00, 32'h00);
    axil_read(5'h10, r);
    check_eq(r, NF, "COUNT after all frames");
    // steady state without back-pressure: 9.3 k inferences/s at 100 MHz
    // allows at most 10,752 cycles between results
    $display("frame interval (auto-restart, no back-pressure): %0d cycles", last_out_cyc[NF-1] - last_out_cyc[NF-2]);
    checks++;
    if (last_out_cyc[NF-1] - last_out_cyc[NF-2] > 10752) fail("throughput below 9.3 k inferences/s");

    $display("mechanisms: gated_off=%0d out_stall=%0d overlap=%0d dual_path=%0d gate_closed=%0d relu_clip=%0d",
             n_gated_off, n_out_stall, n_overlap, n_dual, n_gate_closed, n_relu_clip);
    checks++; if (n_gated_off == 0)   fail("input gating never happened");
    checks++; if (n_out_stall == 0)   fail("output back-pressure never happened");
    checks++; if (n_overlap == 0)     fail("frames never overlapped");
    checks++; if (n_dual == 0)        fail("dual paths never ran together");
    checks++; if (n_gate_closed == 0) fail("gate never closed");
    checks++; if (n_relu_clip == 0)   fail("ReLU never clipped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
