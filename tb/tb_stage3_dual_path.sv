// tb_stage3_dual_path: both paths of the gated convolution at full size.
// The embedded sequence X_conv1 of a random frame (from the reference model)
// is sent as 14 beats of 12 words. Checked: the gate stream ReLU(Z), the
// residual copy of X_conv1 and the content result X_conv5 (12 x 14 words,
// Doppler-major), each with its own random back-pressure in frame 0. Frame 1
// runs without stalls and checks that the content path finishes within the
// schedule of its five layers.
module tb_stage3_dual_path;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, z_valid, z_ready, res_valid, res_ready, x5_valid, x5_ready;
  word_t in_data [12];
  word_t z_data [12];
  word_t res_data [12];
  word_t x5_data;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  stage3_dual_path dut (.*);

  trace_t t;
  bit stall;
  int last_in, last_out, n_dual = 0;

  always @(posedge clk) if (int'(dut.u_gate.state) == 1 && int'(dut.u_p.state) == 1) n_dual++;

  function automatic void cmp(input longint got, input longint want, input string what);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("%s: got %0d want %0d", what, got, want);
    end
  endfunction

  task automatic send();
    for (int l = 0; l < 14; l++) begin
      @(negedge clk);
      in_valid = 1;
      for (int d = 0; d < 12; d++) in_data[d] = word_t'(t.xc1[d*14 + l]);
      do @(posedge clk); while (!in_ready);
      last_in = cyc;
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic recv_z();
    int n = 0;
    while (n < 14) begin
      @(negedge clk);
      z_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      @(posedge clk);
      if (z_valid && z_ready) begin
        for (int d = 0; d < 12; d++) cmp(z_data[d], t.z[d*14 + n], "z");
        n++;
      end
    end
    @(negedge clk); z_ready = 0;
  endtask

  task automatic recv_res();
    int n = 0;
    while (n < 14) begin
      @(negedge clk);
      res_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      @(posedge clk);
      if (res_valid && res_ready) begin
        for (int d = 0; d < 12; d++) cmp(res_data[d], t.xc1[d*14 + n], "res");
        n++;
      end
    end
    @(negedge clk); res_ready = 0;
  endtask

  task automatic recv_x5();
    int n = 0;
    while (n < 12*14) begin
      @(negedge clk);
      x5_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      @(posedge clk);
      if (x5_valid && x5_ready) begin
        cmp(x5_data, t.xc5[n], "x5");
        last_out = cyc;
        n++;
      end
    end
    @(negedge clk); x5_ready = 0;
  endtask

  initial begin
    int bound;
    in_valid = 0; z_ready = 0; res_ready = 0; x5_ready = 0;
    foreach (in_data[i]) in_data[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      t = model(random_frame(30*28));
      stall = (f == 0);
      fork send(); recv_z(); recv_res(); recv_x5(); join
    end
    // W_p, W_c2, W_c3, W_c4 run one after another on a frame
    bound = 14*13 + 168*2 + 168*13 + 168*13;
    $display("stage 3 content path: %0d cycles (schedule %0d)", last_out - last_in, bound);
    checks++;
    if (last_out - last_in != bound) failures++;
    checks++;
    if (n_dual == 0) begin failures++; $display("paths never ran together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
