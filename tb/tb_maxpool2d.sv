// tb_maxpool2d: 6 x 8 max pooling with signed random data. Two frames with
// input gaps and output back-pressure, one without, checking the pooled
// values, the time-major output order and one output beat per cycle.
module tb_maxpool2d;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;
  localparam int H = 6, W = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  word_t in_data, out_data;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  maxpool2d #(.H(H), .W(W)) dut (.*);

  vec_t x, y;
  bit stall;
  int last_in, first_out, last_out;

  task automatic send();
    for (int i = 0; i < H*W; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = word_t'(x[i]);
      while (!in_ready) @(negedge clk);
      last_in = cyc;
      if (stall && $urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic recv();
    int n = 0;
    while (n < (H/2)*(W/2)) begin
      @(negedge clk);
      out_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      if (out_valid && out_ready) begin
        int hp = n % (H/2), wp = n / (H/2);   // time-major order
        checks++;
        if (longint'(out_data) != y[hp*(W/2) + wp]) begin
          failures++;
          $display("out %0d: got %0d want %0d", n, out_data, y[hp*(W/2)+wp]);
        end
        if (n == 0) first_out = cyc;
        last_out = cyc;
        n++;
      end
    end
    @(negedge clk); out_ready = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      x = new[H*W];
      foreach (x[i]) x[i] = longint'($urandom_range(0, 200000)) - 100000;
      y = maxpool2(H, W, x);
      stall = (f < 2);
      fork send(); recv(); join
    end
    // without stalls: output beats back to back right after the last input
    checks++;
    if (last_out - first_out != (H/2)*(W/2) - 1 || first_out - last_in != 1) begin
      failures++;
      $display("timing: first_out-last_in=%0d span=%0d", first_out - last_in, last_out - first_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
