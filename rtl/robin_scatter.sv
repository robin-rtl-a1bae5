// robin_scatter: inverse of robin_gather. Puts the eight 64-bit ROBIN datawords back
// into the bit order of the 512-bit cache block.
//
// Data bit m = 8*i + j of dataword n returns to bit (i + j + n) mod 8 of byte j of word i
// (the paper's oblique interleaving rule; the order of bits inside a dataword is this
// design's choice and matches robin_gather). Each block bit is driven by exactly one
// dataword bit.
//
// Interface: dw_i[n] (64 bits, n = 0..7) in; block_o (512 bits) out. Pure wiring.
module robin_scatter
  import robin_pkg::*;
(
  input  dataword_t dw_i [NCW],
  output block_t    block_o
);

  for (genvar n = 0; n < NCW; n++) begin : g_cw
    for (genvar m = 0; m < K; m++) begin : g_bit
      assign block_o[robin_src(n, m)] = dw_i[n][m];
    end
  end

endmodule
