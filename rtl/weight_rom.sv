// weight_rom: constant weight store of one network layer.
//
// The reference build keeps all weights as compile-time constants that end up
// in LUT-based ROM; this module is one layer's slice of that ROM. Each
// address is an input channel and returns the whole row of weights that one
// MAC cycle of conv_layer needs: ROW = COUT*KH*KW words ordered
// (co, kh, kw), plus the layer's COUT biases. Reads are combinational, as in
// distributed ROM, so the data belongs to the same cycle as the address.
// Contents come from gatecnn_pkg::weight_value()/bias_value(), evaluated at
// elaboration; giving every layer its own slice (rather than one shared ROM)
// is this design's choice, made so all stages can read weights in parallel.
module weight_rom
  import gatecnn_pkg::*;
#(
  parameter int unsigned LAYER = 0,
  parameter int unsigned DEPTH = 1,  // input channels
  parameter int unsigned ROW   = 1,  // weights per input channel
  parameter int unsigned NBIAS = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic [AW-1:0] addr,
  output word_t         row  [ROW],
  output word_t         bias [NBIAS]
);

  word_t rom [DEPTH*ROW];

  for (genvar i = 0; i < DEPTH*ROW; i++) begin : g_rom
    localparam word_t V = weight_value(LAYER, i);
    assign rom[i] = V;
  end

  for (genvar b = 0; b < NBIAS; b++) begin : g_bias
    localparam word_t B = bias_value(LAYER, b);
    assign bias[b] = B;
  end

  always_comb begin
    for (int j = 0; j < ROW; j++) begin
      row[j] = (int'(addr) < DEPTH) ? rom[int'(addr)*ROW + j] : '0;
    end
  end

endmodule
