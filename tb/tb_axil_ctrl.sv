// tb_axil_ctrl: register behaviour of the AXI-Lite control slave.
// Checks reset values, ap_start set by a write and cleared by frame_in,
// start_en following ap_start / auto_restart, ap_done set by frame_out and
// cleared by reading CTRL, ap_idle following busy, the inference counter,
// reads of an unmapped address, and write/read responses held under
// BREADY/RREADY back-pressure.
module tb_axil_ctrl;
  logic clk = 0, rst_n = 0;
  logic [4:0]  s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;
  logic        start_en, frame_in, frame_out, busy;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  axil_ctrl dut (.*);

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("%s: got %h want %h", what, got, want);
    end
  endtask

  task automatic wr(input logic [4:0] a, input logic [31:0] d, input int bdelay);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1; s_axil_wstrb = 4'hF;
    s_axil_bready = 0;
    do @(posedge clk); while (!s_axil_awready);
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    repeat (bdelay) begin
      @(negedge clk);
      expect_eq(s_axil_bvalid, 1, "bvalid held");
    end
    s_axil_bready = 1;
    do @(posedge clk); while (!s_axil_bvalid);
    @(negedge clk);
    s_axil_bready = 0;
  endtask

  task automatic rd(input logic [4:0] a, output logic [31:0] d, input int rdelay);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1; s_axil_rready = 0;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0;
    d = s_axil_rdata;
    repeat (rdelay) begin
      @(negedge clk);
      expect_eq(s_axil_rvalid, 1, "rvalid held");
      expect_eq(s_axil_rdata, d, "rdata held");
    end
    s_axil_rready = 1;
    do @(posedge clk); while (!s_axil_rvalid);
    d = s_axil_rdata;
    @(negedge clk);
    s_axil_rready = 0;
  endtask

  task automatic pulse(input bit is_in);
    @(negedge clk);
    if (is_in) frame_in = 1; else frame_out = 1;
    @(negedge clk);
    frame_in = 0; frame_out = 0;
  endtask

  initial begin
    logic [31:0] r;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_arvalid = 0; s_axil_bready = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    frame_in = 0; frame_out = 0; busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(5'h00, r, 0);  expect_eq(r, 32'h4, "CTRL after reset (idle)");
    expect_eq(start_en, 0, "start_en after reset");
    wr(5'h00, 32'h1, 2);
    expect_eq(start_en, 1, "start_en after ap_start");
    rd(5'h00, r, 3);  expect_eq(r, 32'h5, "CTRL start+idle");
    busy = 1;
    pulse(1);
    expect_eq(start_en, 0, "ap_start cleared by frame_in");
    rd(5'h00, r, 0);  expect_eq(r, 32'h0, "CTRL busy");
    pulse(0);
    busy = 0;
    rd(5'h00, r, 1);  expect_eq(r, 32'h6, "CTRL done+idle");
    rd(5'h00, r, 0);  expect_eq(r, 32'h4, "done cleared by read");
    rd(5'h10, r, 0);  expect_eq(r, 32'd1, "COUNT");
    wr(5'h00, 32'h80, 0);
    expect_eq(start_en, 1, "auto_restart enables input");
    repeat (3) begin pulse(1); pulse(0); end
    expect_eq(start_en, 1, "auto_restart survives frames");
    rd(5'h10, r, 0);  expect_eq(r, 32'd4, "COUNT after 4");
    rd(5'h00, r, 0);  expect_eq(r, 32'h86, "CTRL auto+done+idle");
    rd(5'h08, r, 0);  expect_eq(r, 32'h0, "unmapped address");
    wr(5'h00, 32'h0, 0);
    expect_eq(start_en, 0, "auto_restart off");
    checks++;
    if (s_axil_bresp != 0 || s_axil_rresp != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
