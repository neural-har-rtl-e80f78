// stage4_gate: pipeline stage 4, the gating mechanism and residual add,
//   Y = X_conv5 (.) ReLU(Z) + X_conv1     (element by element).
//
// ReLU(Z) and X_conv1 arrive early, as D-word beats in time order, and are
// stored whole (D*WP words each, address t*D + d). X_conv5 arrives last, one
// word per beat in Doppler-major order (d outer, t inner); each word is
// combined with the stored Z and X_conv1 entries of the same (d, t) and
// leaves in the same cycle, so the Y stream has the X_conv5 order. The
// product is requantised (floor, saturate) to Q16.16 before the saturating
// residual add. The formula follows the published network; buffering and
// rounding are this design's choices. Z is expected with ReLU already
// applied (stage 3 does it); negative Z words are clipped here too.
//
// Timing: X_conv5 beats pass straight through (combinational valid/ready)
// once both buffers are full; the buffers are released after the last of
// the D*WP X_conv5 words.
module stage4_gate
  import gatecnn_pkg::*;
#(
  parameter int unsigned D  = gatecnn_pkg::N_D,
  parameter int unsigned WP = gatecnn_pkg::N_WP
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  z_valid,
  output logic  z_ready,
  input  word_t z_data   [D],
  input  logic  res_valid,
  output logic  res_ready,
  input  word_t res_data [D],
  input  logic  x5_valid,
  output logic  x5_ready,
  input  word_t x5_data,
  output logic  y_valid,
  input  logic  y_ready,
  output word_t y_data
);

  word_t       zbuf [D*WP];
  word_t       rbuf [D*WP];
  logic        z_full, r_full;
  logic [15:0] zt, rt;     // time step being written
  logic [15:0] d, t;       // position of the current X_conv5 word

  assign z_ready   = !z_full;
  assign res_ready = !r_full;
  assign y_valid   = x5_valid && z_full && r_full;
  assign x5_ready  = y_ready && z_full && r_full;

  always_comb begin
    word_t zr;
    zr = zbuf[int'(t)*D + int'(d)];
    if (zr < 0) zr = '0;
    y_data = sat_add(requant(acc_t'(x5_data) * acc_t'(zr)), rbuf[int'(t)*D + int'(d)]);
  end

  always_ff @(posedge clk) begin
    if (z_valid && z_ready)
      for (int i = 0; i < D; i++) zbuf[int'(zt)*D + i] <= z_data[i];
    if (res_valid && res_ready)
      for (int i = 0; i < D; i++) rbuf[int'(rt)*D + i] <= res_data[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      z_full <= 1'b0;
      r_full <= 1'b0;
      zt     <= '0;
      rt     <= '0;
      d      <= '0;
      t      <= '0;
    end else begin
      if (z_valid && z_ready) begin
        if (int'(zt) == WP-1) begin zt <= '0; z_full <= 1'b1; end
        else zt <= zt + 1'b1;
      end
      if (res_valid && res_ready) begin
        if (int'(rt) == WP-1) begin rt <= '0; r_full <= 1'b1; end
        else rt <= rt + 1'b1;
      end
      if (x5_valid && x5_ready) begin
        if (int'(t) == WP-1) begin
          t <= '0;
          if (int'(d) == D-1) begin
            d      <= '0;
            z_full <= 1'b0;
            r_full <= 1'b0;
          end else begin
            d <= d + 1'b1;
          end
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

endmodule
