// tb_stage5_output: averaging Conv1D (12 Doppler rows -> 1 per time step)
// and the 14 -> 6 classifier. Y of a random inference from the reference
// model goes in Doppler-major; the six logits must come out in order on the
// AXI-Stream port with TLAST on the sixth. Frame 0 with back-pressure, frame 1
// without, checking 14*13 + 15 + 6 cycles from last Y word to last logit.
module tb_stage5_output;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic y_valid, y_ready, m_axis_tvalid, m_axis_tready, m_axis_tlast;
  word_t y_data;
  logic [31:0] m_axis_tdata;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  stage5_output dut (.*);

  trace_t t;
  bit stall;
  int last_in, last_out;

  task automatic send();
    for (int i = 0; i < 168; i++) begin
      @(negedge clk);
      y_valid = 1; y_data = word_t'(t.y[i]);
      while (!y_ready) @(negedge clk);
      last_in = cyc;
    end
    @(negedge clk); y_valid = 0;
  endtask

  task automatic recv();
    int n = 0;
    while (n < 6) begin
      @(negedge clk);
      m_axis_tready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      if (m_axis_tvalid && m_axis_tready) begin
        checks++;
        if (longint'($signed(m_axis_tdata)) != t.logits[n]) begin
          failures++;
          $display("logit %0d: got %0d want %0d", n, $signed(m_axis_tdata), t.logits[n]);
        end
        checks++;
        if (m_axis_tlast != (n == 5)) begin failures++; $display("tlast at %0d", n); end
        last_out = cyc;
        n++;
      end
    end
    @(negedge clk); m_axis_tready = 0;
  endtask

  initial begin
    y_valid = 0; m_axis_tready = 0; y_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      t = model(random_frame(30*28));
      stall = (f == 0);
      fork send(); recv(); join
    end
    checks++;
    if (last_out - last_in != 14*13 + 15 + 6) begin
      failures++;
      $display("schedule: %0d cycles, expected %0d", last_out - last_in, 14*13 + 15 + 6);
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
