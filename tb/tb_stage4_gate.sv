// tb_stage4_gate: Y = X_conv5 * ReLU(Z) + X_conv1 on 12 x 14 words.
// Frame 0 uses the tensors of a random inference from the reference model.
// Frame 1 uses random values in [-4, 4) for all three inputs, including
// negative Z (must act as a closed gate) and a few very large values that
// must saturate. X_conv5 is offered before Z and X_conv1 have arrived, so
// the test also sees the stage hold it off until both buffers are full.
module tb_stage4_gate;
  import gatecnn_pkg::*;
  import gatecnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic z_valid, z_ready, res_valid, res_ready, x5_valid, x5_ready, y_valid, y_ready;
  word_t z_data [12];
  word_t res_data [12];
  word_t x5_data, y_data;
  int checks = 0, failures = 0, cyc = 0;
  int n_held = 0, n_sat = 0, n_closed = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  stage4_gate dut (.*);

  vec_t z, x1, x5, y;

  always @(posedge clk) if (x5_valid && !x5_ready && y_ready) n_held++;

  task automatic send_vec(input bit is_z);
    for (int l = 0; l < 14; l++) begin
      @(negedge clk);
      if (is_z) begin
        z_valid = 1;
        for (int d = 0; d < 12; d++) z_data[d] = word_t'(z[d*14 + l]);
        do @(posedge clk); while (!z_ready);
      end else begin
        res_valid = 1;
        for (int d = 0; d < 12; d++) res_data[d] = word_t'(x1[d*14 + l]);
        do @(posedge clk); while (!res_ready);
      end
      repeat ($urandom_range(0, 2)) begin
        @(negedge clk);
        if (is_z) z_valid = 0; else res_valid = 0;
      end
    end
    @(negedge clk);
    if (is_z) z_valid = 0; else res_valid = 0;
  endtask

  task automatic send_x5();
    for (int i = 0; i < 168; i++) begin
      @(negedge clk);
      x5_valid = 1; x5_data = word_t'(x5[i]);
      do @(posedge clk); while (!x5_ready);
    end
    @(negedge clk); x5_valid = 0;
  endtask

  task automatic recv();
    int n = 0;
    while (n < 168) begin
      @(negedge clk);
      y_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (y_valid && y_ready) begin
        checks++;
        if (longint'(y_data) != y[n]) begin
          failures++;
          if (failures < 10) $display("y %0d: got %0d want %0d", n, y_data, y[n]);
        end
        if (y[n] == 64'sd2147483647 || y[n] == -64'sd2147483648) n_sat++;
        n++;
      end
    end
    @(negedge clk); y_ready = 0;
  endtask

  initial begin
    trace_t t;
    z_valid = 0; res_valid = 0; x5_valid = 0; y_ready = 0; x5_data = 0;
    foreach (z_data[i]) begin z_data[i] = 0; res_data[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      if (f == 0) begin
        t = model(random_frame(30*28));
        z = t.z; x1 = t.xc1; x5 = t.xc5;
      end else begin
        z = new[168]; x1 = new[168]; x5 = new[168];
        foreach (z[i]) begin
          z[i]  = longint'($urandom_range(0, 8*65536)) - 4*65536;
          x1[i] = longint'($urandom_range(0, 8*65536)) - 4*65536;
          x5[i] = longint'($urandom_range(0, 8*65536)) - 4*65536;
        end
        for (int i = 0; i < 168; i += 20) begin
          z[i] = 32'h4000_0000; x5[i] = (i % 40 == 0) ? 32'h2000_0000 : -32'sh2000_0000;
        end
      end
      foreach (z[i]) if (z[i] <= 0) n_closed++;
      y = gate(x5, z, x1);
      fork send_vec(1); send_vec(0); send_x5(); recv(); join
    end
    $display("held=%0d saturated=%0d closed=%0d", n_held, n_sat, n_closed);
    checks++; if (n_held == 0)   begin failures++; $display("x5 never held off"); end
    checks++; if (n_sat == 0)    begin failures++; $display("no saturation"); end
    checks++; if (n_closed == 0) begin failures++; $display("gate never closed"); end
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
