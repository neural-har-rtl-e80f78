// tb_weight_rom: reads every row of a 3-input, 4x3-tap ROM slice and checks
// each word and bias against an independent re-implementation of the hash
// that defines the constant weight pattern.
module tb_weight_rom;
  import gatecnn_pkg::*;
  localparam int unsigned DEPTH = 3, ROW = 12, NB = 4, LAYER = 5;
  logic [1:0] addr;
  word_t row [ROW];
  word_t bias [NB];
  int checks = 0, failures = 0;

  weight_rom #(.LAYER(LAYER), .DEPTH(DEPTH), .ROW(ROW), .NBIAS(NB)) dut (.*);

  function automatic int unsigned h32(input int unsigned a);
    int unsigned h;
    h = a;
    h = h ^ (h >> 16); h = h * 32'h7FEB352D;
    h = h ^ (h >> 15); h = h * 32'h846CA68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic int expect_w(int unsigned idx);
    int unsigned h = h32((LAYER << 20) ^ idx ^ 32'h5EED0000);
    return int'(h) >>> 18;
  endfunction
  function automatic int expect_b(int unsigned co);
    int unsigned h = h32((LAYER << 20) ^ co ^ 32'hB1A50000);
    return int'(h) >>> 19;
  endfunction

  initial begin
    int nonzero = 0;
    for (int a = 0; a < DEPTH; a++) begin
      addr = 2'(a);
      #1;
      for (int j = 0; j < ROW; j++) begin
        checks++;
        if (row[j] != expect_w(a*ROW + j)) begin
          failures++;
          $display("row %0d word %0d: got %0d want %0d", a, j, row[j], expect_w(a*ROW+j));
        end
        if (row[j] != 0) nonzero++;
        checks++;
        if (row[j] >= 8192 || row[j] < -8192) failures++;
      end
    end
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (bias[b] != expect_b(b)) failures++;
    end
    checks++;
    if (nonzero < ROW) failures++;  // pattern must not be degenerate
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
