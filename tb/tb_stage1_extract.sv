// tb_stage1_extract: full-size stage 1 (30 x 28 Conv2D + 2 x 2 pooling).
// Two random frames, the first with input gaps and output back-pressure.
// Checks the 210 pooled words in time-major order against the reference
// model, and the no-stall schedule: last input beat to last output beat in
// 2*30*28 + 15*14 cycles.
module tb_stage1_extract;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;
  localparam int NIN = 30*28, NOUT = 15*14;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  word_t in_data, out_data;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  stage1_extract dut (.*);

  vec_t x, y;
  bit stall;
  int last_in, last_out;

  task automatic send();
    for (int i = 0; i < NIN; i++) begin
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
    while (n < NOUT) begin
      @(negedge clk);
      out_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      if (out_valid && out_ready) begin
        int hp = n % 15, wp = n / 15;
        checks++;
        if (longint'(out_data) != y[hp*14 + wp]) begin
          failures++;
          if (failures < 10) $display("out %0d: got %0d want %0d", n, out_data, y[hp*14+wp]);
        end
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
    for (int f = 0; f < 2; f++) begin
      x = random_frame(NIN);
      y = maxpool2(30, 28, conv(L_C0, 1, 1, 30, 28, 3, 3, 0, x));
      stall = (f == 0);
      fork send(); recv(); join
    end
    checks++;
    if (last_out - last_in != 2*NIN + NOUT) begin
      failures++;
      $display("schedule: %0d cycles, expected %0d", last_out - last_in, 2*NIN + NOUT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
