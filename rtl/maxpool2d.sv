// maxpool2d: 2x2, stride-2 max pooling of a single-channel H x W map.
//
// The input arrives as one Q16.16 word per beat in raster order (row h
// outer, column w inner) and is stored whole. The pooled (H/2) x (W/2) map
// is then sent one word per cycle in column order: time index w' outer,
// Doppler index h' inner. That order makes each group of H/2 consecutive
// output words one pooled Doppler column, which is exactly the channel
// vector of the Doppler-embedding Conv1D that follows; the reshape from a
// 2D map to a (C = H', L = W') sequence therefore costs nothing. Pool size
// and output order are this design's choices.
//
// Timing: H*W load beats, then (H/2)*(W/2) output beats, one per cycle
// without back-pressure. A new frame is accepted after the last output.
module maxpool2d
  import gatecnn_pkg::*;
#(
  parameter int unsigned H = 30,
  parameter int unsigned W = 28
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data
);

  localparam int unsigned HO = H/2;
  localparam int unsigned WO = W/2;

  typedef enum logic {S_LOAD, S_OUT} state_e;

  state_e      state;
  word_t       fbuf [H*W];
  logic [15:0] wr;
  logic [15:0] ph, pw;  // pooled row (Doppler), pooled column (time)

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);

  always_comb begin
    word_t a, b, c, d, m1, m2;
    a = fbuf[(2*int'(ph))*W   + 2*int'(pw)];
    b = fbuf[(2*int'(ph))*W   + 2*int'(pw) + 1];
    c = fbuf[(2*int'(ph)+1)*W + 2*int'(pw)];
    d = fbuf[(2*int'(ph)+1)*W + 2*int'(pw) + 1];
    m1 = (a > b) ? a : b;
    m2 = (c > d) ? c : d;
    out_data = (m1 > m2) ? m1 : m2;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) fbuf[int'(wr)] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      wr    <= '0;
      ph    <= '0;
      pw    <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (int'(wr) == H*W-1) begin
            wr    <= '0;
            ph    <= '0;
            pw    <= '0;
            state <= S_OUT;
          end else begin
            wr <= wr + 1'b1;
          end
        end
        S_OUT: if (out_ready) begin
          if (int'(ph) == HO-1) begin
            ph <= '0;
            if (int'(pw) == WO-1) begin
              pw    <= '0;
              state <= S_LOAD;
            end else begin
              pw <= pw + 1'b1;
            end
          end else begin
            ph <= ph + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
