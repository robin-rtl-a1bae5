// secded_encoder: SEC-DED(72,64) check-bit generator for one 64-bit dataword.
//
// The paper protects each 64-bit dataword with an 8-bit SEC-DED code but does not give
// the parity-check matrix; this design uses an extended Hamming code. Data bit d occupies
// Hamming position robin_pkg::hamming_pos(d) (the positions 3..71 that are not powers of
// two). Check bit c (c = 0..6) is the XOR of the data bits whose position has bit c set;
// check bit 7 is the overall parity of the 64 data bits and the 7 Hamming check bits, so
// that the whole 72-bit codeword has even parity.
//
// Interface: data_i (64 bits) in, check_o (8 bits) out. Purely combinational.
module secded_encoder
  import robin_pkg::*;
(
  input  dataword_t data_i,
  output check_t    check_o
);

  always_comb begin
    check_t c;
    c = '0;
    for (int unsigned d = 0; d < K; d++) begin
      for (int unsigned b = 0; b < R - 1; b++) begin
        if (((hamming_pos(d) >> b) & 1) != 0) c[b] = c[b] ^ data_i[d];
      end
    end
    c[R-1] = ^data_i ^ ^c[R-2:0];
    check_o = c;
  end

endmodule
