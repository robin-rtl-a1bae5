// robin_gather: splits a 512-bit cache block into the eight 64-bit datawords of the
// ROBIN ECC configuration.
//
// Following the paper's rule, codeword n takes from byte j of word i the bit at position
// (i + j + n) mod 8. Every codeword thus holds one bit of each of the 64 bytes, eight bits
// of each 64-bit word, and, across the bytes of one word, each of the eight bit positions
// once, so the bit transitions of a write spread evenly over the codewords. Data bit
// m = 8*i + j of a codeword comes from word i, byte j (an ordering this design chose).
//
// Interface: block_i (512 bits) in; dw_o[n] (64 bits) out for n = 0..7. Pure wiring, no
// logic and no clock.
module robin_gather
  import robin_pkg::*;
(
  input  block_t    block_i,
  output dataword_t dw_o [NCW]
);

  for (genvar n = 0; n < NCW; n++) begin : g_cw
    for (genvar m = 0; m < K; m++) begin : g_bit
      assign dw_o[n][m] = block_i[robin_src(n, m)];
    end
  end

endmodule
