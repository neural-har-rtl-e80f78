// tb_conv_layer: drives a 3-in, 4-out, 5x6, 3x3 conv_layer with ReLU in
// channels-last order (3-word beats), with random input gaps and output
// back-pressure for two frames, then a third frame with no stalls to check
// the schedule of CIN+1 cycles per output pixel. Results are compared with
// gatecnn_ref_pkg::conv.
module tb_conv_layer;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;

  localparam int CIN = 3, COUT = 4, H = 5, W = 6, K = 3, LAYER = 5;

  logic  clk = 0, rst_n = 0;
  logic  in_valid, in_ready, out_valid, out_ready;
  word_t in_data [CIN];
  word_t out_data [COUT];
  int    checks = 0, failures = 0;
  int    cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  conv_layer #(.LAYER(LAYER), .CIN(CIN), .COUT(COUT), .H(H), .W(W), .KH(K), .KW(K),
               .RELU(1'b1), .IN_BW(CIN), .IN_SC(1), .IN_SH(W*CIN), .IN_SW(CIN)) dut (.*);

  vec_t x, y;
  bit   stall_out;
  int   got, first_out_cyc, last_out_cyc, last_in_cyc;

  // Inputs change on the falling edge; a beat moves on the rising edge
  // when valid and ready are both high.
  task automatic send_frame(input bit gaps);
    for (int p = 0; p < H*W; p++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int c = 0; c < CIN; c++) in_data[c] = word_t'(x[c*H*W + p]);
      while (!in_ready) @(negedge clk);
      last_in_cyc = cyc;
      if (gaps && $urandom_range(0, 2) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic recv_frame();
    got = 0;
    while (got < H*W) begin
      @(negedge clk);
      out_ready = stall_out ? ($urandom_range(0, 1) == 1) : 1'b1;
      if (out_valid && out_ready) begin
        if (got == 0) first_out_cyc = cyc;
        last_out_cyc = cyc;
        for (int co = 0; co < COUT; co++) begin
          checks++;
          if (longint'(out_data[co]) != y[co*H*W + got]) begin
            failures++;
            if (failures < 10) $display("pix %0d co %0d: got %0d want %0d",
                                        got, co, out_data[co], y[co*H*W + got]);
          end
        end
        got++;
      end
    end
    @(negedge clk);
    out_ready = 1'b0;
  endtask

  initial begin
    int relu_zero = 0;
    in_valid = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 3; f++) begin
      x = new[CIN*H*W];
      foreach (x[i]) x[i] = longint'($urandom_range(0, 2*65536)) - 65536;  // [-1, 1]
      y = conv(LAYER, CIN, COUT, H, W, K, K, 1, x);
      foreach (y[i]) if (y[i] == 0) relu_zero++;
      stall_out = (f < 2);
      fork
        send_frame(f < 2);
        recv_frame();
      join
      if (f == 2) begin
        // last input beat -> last output beat: H*W*(CIN+1) cycles
        checks++;
        if (last_out_cyc - last_in_cyc != H*W*(CIN+1)) begin
          failures++;
          $display("frame cycles %0d, expected %0d", last_out_cyc - last_in_cyc, H*W*(CIN+1));
        end
      end
    end
    checks++;
    if (relu_zero == 0) begin failures++; $display("ReLU never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
