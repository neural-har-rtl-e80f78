// conv_layer: one convolution (or fully connected) layer of the GateCNN
// dataflow pipeline, with optional ReLU.
//
// Function: out[co][oh][ow] = bias[co] + sum over ci, kh, kw of
//   w[ci][co][kh][kw] * in[ci][oh+kh-KH/2][ow+kw-KW/2]
// with zero padding ("same" size, stride 1). Conv1D is the case H = 1, a
// fully connected layer the case H = W = KH = KW = 1. Arithmetic is Q16.16;
// products are summed at 64 bits and requantised once (floor, saturate).
//
// How it works: the layer first stores one whole input frame (LOAD), then
// walks the output pixels in raster order (oh outer, ow inner). For each
// pixel it spends CIN cycles (MAC), each cycle consuming one input channel:
// COUT*KH*KW multipliers work in parallel, fed by KH*KW reads of the frame
// buffer and one weight_rom row. One more cycle (EMIT) presents all COUT
// results of the pixel as one output beat. A frame therefore takes
// CIN*H*W/IN_BW load beats and H*W*(CIN+1) compute cycles, plus any output
// stall. The next frame is accepted as soon as the last pixel has left.
// This "one pixel, all output channels, channels serial" schedule is this
// design's choice; the reference build generated its datapath with an HLS
// tool and its insides are not published.
//
// Interface: valid/ready streams. An input beat carries IN_BW words that go
// to consecutive frame-buffer addresses. The layer reads element (c, h, w)
// at address c*IN_SC + h*IN_SH + w*IN_SW, so the producer's write order and
// any reshape between layers are expressed only by these three strides. An
// output beat carries COUT words: the channels-last pixel (co = 0..COUT-1).
module conv_layer
  import gatecnn_pkg::*;
#(
  parameter int unsigned LAYER = 0,
  parameter int unsigned CIN   = 1,
  parameter int unsigned COUT  = 1,
  parameter int unsigned H     = 4,
  parameter int unsigned W     = 4,
  parameter int unsigned KH    = 3,
  parameter int unsigned KW    = 3,
  parameter bit          RELU  = 1'b0,
  parameter int unsigned IN_BW = 1,
  parameter int unsigned IN_SC = H*W,
  parameter int unsigned IN_SH = W,
  parameter int unsigned IN_SW = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data  [IN_BW],
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data [COUT]
);

  localparam int unsigned NIN    = CIN*H*W;
  localparam int unsigned NBEATS = NIN / IN_BW;
  localparam int unsigned ROW    = COUT*KH*KW;
  localparam int unsigned CAW    = (CIN > 1) ? $clog2(CIN) : 1;

  typedef enum logic [1:0] {S_LOAD, S_MAC, S_EMIT} state_e;

  state_e      state;
  word_t       fbuf [NIN];
  logic [15:0] beat;
  logic [15:0] oh, ow, ci;
  acc_t        acc  [COUT];

  word_t wrow  [ROW];
  word_t wbias [COUT];
  word_t tap   [KH*KW];
  acc_t  psum  [COUT];

  weight_rom #(.LAYER(LAYER), .DEPTH(CIN), .ROW(ROW), .NBIAS(COUT)) u_rom (
    .addr(ci[CAW-1:0]),
    .row (wrow),
    .bias(wbias)
  );

  // KH*KW window of the current input channel, zero outside the frame
  always_comb begin
    for (int kh = 0; kh < KH; kh++) begin
      for (int kw = 0; kw < KW; kw++) begin
        int ih, iw;
        ih = int'(oh) + kh - int'(KH/2);
        iw = int'(ow) + kw - int'(KW/2);
        if (ih >= 0 && ih < int'(H) && iw >= 0 && iw < int'(W))
          tap[kh*KW+kw] = fbuf[int'(ci)*IN_SC + ih*IN_SH + iw*IN_SW];
        else
          tap[kh*KW+kw] = '0;
      end
    end
  end

  // COUT x KH*KW parallel products of this cycle
  always_comb begin
    for (int co = 0; co < COUT; co++) begin
      psum[co] = '0;
      for (int k = 0; k < KH*KW; k++) begin
        psum[co] = psum[co] + acc_t'(wrow[co*KH*KW + k]) * acc_t'(tap[k]);
      end
    end
  end

  always_comb begin
    for (int co = 0; co < COUT; co++) begin
      word_t r;
      r = requant(acc[co]);
      out_data[co] = (RELU && r < 0) ? '0 : r;
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_EMIT);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int j = 0; j < IN_BW; j++) fbuf[int'(beat)*IN_BW + j] <= in_data[j];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD;
      beat  <= '0;
      oh    <= '0;
      ow    <= '0;
      ci    <= '0;
      for (int co = 0; co < COUT; co++) acc[co] <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (int'(beat) == NBEATS-1) begin
            beat  <= '0;
            state <= S_MAC;
            oh    <= '0;
            ow    <= '0;
            ci    <= '0;
            for (int co = 0; co < COUT; co++) acc[co] <= acc_t'(wbias[co]) <<< FRAC;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_MAC: begin
          for (int co = 0; co < COUT; co++) acc[co] <= acc[co] + psum[co];
          if (int'(ci) == CIN-1) state <= S_EMIT;
          else                   ci    <= ci + 1'b1;
        end
        S_EMIT: if (out_ready) begin
          ci <= '0;
          for (int co = 0; co < COUT; co++) acc[co] <= acc_t'(wbias[co]) <<< FRAC;
          if (int'(ow) == W-1) begin
            ow <= '0;
            if (int'(oh) == H-1) begin
              oh    <= '0;
              state <= S_LOAD;
            end else begin
              oh    <= oh + 1'b1;
              state <= S_MAC;
            end
          end else begin
            ow    <= ow + 1'b1;
            state <= S_MAC;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // A presented output beat is held until it is taken
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data[0]));

endmodule
