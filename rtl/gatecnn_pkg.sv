// gatecnn_pkg: numeric format, network dimensions and the constant weight
// generator shared by every GateCNN stage.
//
// Numbers are 32-bit two's-complement fixed point with 16 fraction bits
// (Q16.16). The 32-bit word width follows the reference FPGA build; the
// 16/16 split is this design's choice. A MAC sums full 64-bit products
// (Q32.32) and is brought back to Q16.16 once, by an arithmetic right shift
// (floor) and saturation.
//
// Network sizes: the 1x30x28 input frame and 6 classes come from the dataset
// description. D = 12, the 3-tap time kernels, the 3x3 Conv2D kernels and the
// 2x2 pooling are this design's reconstruction, picked because they reproduce
// the reported model size (2,730 vs. 2,719 parameters) and work
// (0.277 M multiply-accumulates per inference).
//
// Weights: the trained values are not published, so weight_value() and
// bias_value() return a fixed pseudo-random pattern in [-0.125, 0.125) made
// by an integer hash of (layer, index). Replace these two functions with a
// table of trained weights to run a real model; nothing else changes.
package gatecnn_pkg;

  typedef logic signed [31:0] word_t;
  typedef logic signed [63:0] acc_t;

  localparam int unsigned FRAC = 16;

  // Network dimensions
  localparam int unsigned N_H0   = 30;  // Doppler bins of the input frame
  localparam int unsigned N_W0   = 28;  // time steps of the input frame
  localparam int unsigned N_HP   = 15;  // Doppler bins after 2x2 pooling
  localparam int unsigned N_WP   = 14;  // time steps after 2x2 pooling
  localparam int unsigned N_D    = 12;  // embedding width
  localparam int unsigned N_KT   = 3;   // time-kernel length of W_g / W_p
  localparam int unsigned N_K2   = 3;   // Conv2D kernel size
  localparam int unsigned N_NCLS = 6;   // activity classes

  // Layer identifiers, used as weight-ROM seeds
  typedef enum int unsigned {
    L_C0  = 0,  // channel-fusion Conv2D
    L_C1  = 1,  // Doppler embedding Conv1D
    L_G   = 2,  // gate Conv1D
    L_P   = 3,  // content Conv1D
    L_C2  = 4,  // Conv2D 1 -> D
    L_C3  = 5,  // Conv2D D -> D
    L_C4  = 6,  // Conv2D D -> 1
    L_AVG = 7,  // averaging Conv1D
    L_CLS = 8   // classifier
  } layer_e;

  function automatic logic [31:0] mix32(input logic [31:0] a);
    logic [31:0] h;
    h = a;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB352D;
    h = h ^ (h >> 15);
    h = h * 32'h846CA68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Weight of the given layer at flat index idx. Flat index of a layer with
  // CIN inputs, COUT outputs and a KH x KW kernel:
  //   idx = ((ci * COUT + co) * KH + kh) * KW + kw
  function automatic word_t weight_value(input int unsigned layer, input int unsigned idx);
    logic [31:0] h;
    h = mix32((layer << 20) ^ idx ^ 32'h5EED0000);
    return word_t'($signed(h[31:18]));  // 14-bit signed -> +-8192 LSB = +-0.125
  endfunction

  function automatic word_t bias_value(input int unsigned layer, input int unsigned co);
    logic [31:0] h;
    h = mix32((layer << 20) ^ co ^ 32'hB1A50000);
    return word_t'($signed(h[31:19]));  // +-0.0625
  endfunction

  // Q32.32 accumulator -> Q16.16 with floor and saturation
  function automatic word_t requant(input acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32'sh7FFF_FFFF)) return 32'sh7FFF_FFFF;
    if (s < -acc_t'(64'sh8000_0000)) return 32'sh8000_0000;
    return word_t'(s);
  endfunction

  // Saturating Q16.16 add
  function automatic word_t sat_add(input word_t a, input word_t b);
    acc_t s;
    s = acc_t'(a) + acc_t'(b);
    if (s > acc_t'(32'sh7FFF_FFFF)) return 32'sh7FFF_FFFF;
    if (s < -acc_t'(64'sh8000_0000)) return 32'sh8000_0000;
    return word_t'(s);
  endfunction

endpackage
