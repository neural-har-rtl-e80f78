// tb_stage2_embed: Doppler embedding Conv1D (15 bins -> 12 features per time
// step, 14 steps). Input is the pooled map of a random frame from the
// reference model, sent time-major; every output beat (12 words) is checked.
// Two frames, the first with stalls; the second checks the schedule of
// 14*(15+1) cycles from last input to last output.
module tb_stage2_embed;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  word_t in_data;
  word_t out_data [12];
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  stage2_embed dut (.*);

  trace_t t;
  bit stall;
  int last_in, last_out;

  task automatic send();
    for (int i = 0; i < 15*14; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = word_t'(t.xds[(i % 15)*14 + i / 15]);
      while (!in_ready) @(negedge clk);
      last_in = cyc;
      if (stall && $urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic recv();
    int n = 0;
    while (n < 14) begin
      @(negedge clk);
      out_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      if (out_valid && out_ready) begin
        for (int d = 0; d < 12; d++) begin
          checks++;
          if (longint'(out_data[d]) != t.xc1[d*14 + n]) begin
            failures++;
            if (failures < 10) $display("t %0d d %0d: got %0d want %0d", n, d, out_data[d], t.xc1[d*14+n]);
          end
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
      t = model(random_frame(30*28));
      stall = (f == 0);
      fork send(); recv(); join
    end
    checks++;
    if (last_out - last_in != 14*16) begin
      failures++;
      $display("schedule: %0d cycles, expected %0d", last_out - last_in, 14*16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
