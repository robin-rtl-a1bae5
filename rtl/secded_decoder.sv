// secded_decoder: SEC-DED(72,64) checker and single-error corrector.
//
// Matches secded_encoder (extended Hamming code, the code choice of this design; the
// paper names only SEC-DED(72,64)). The 7-bit syndrome is the XOR of the Hamming
// positions of all ones among the data and check bits 0..6; the parity bit p is the XOR
// of all 72 bits. Outcome:
//   syndrome = 0, p = 0 : no error.
//   p = 1               : single error at Hamming position "syndrome" (0 means the
//                         overall parity bit itself); a data bit there is flipped back.
//                         A syndrome above 71 cannot come from one error and is reported
//                         as uncorrectable.
//   syndrome != 0, p = 0: double error, detected and not corrected.
//
// Interface: data_i / check_i in; data_o (corrected data), corrected_o, uncorrectable_o
// out. Purely combinational.
module secded_decoder
  import robin_pkg::*;
(
  input  dataword_t data_i,
  input  check_t    check_i,
  output dataword_t data_o,
  output logic      corrected_o,
  output logic      uncorrectable_o
);

  logic [R-2:0] syndrome;
  logic         parity;

  always_comb begin
    syndrome = check_i[R-2:0];
    for (int unsigned d = 0; d < K; d++) begin
      if (data_i[d]) syndrome = syndrome ^ (R-1)'(hamming_pos(d));
    end
    parity = ^data_i ^ ^check_i;
  end

  always_comb begin
    data_o          = data_i;
    corrected_o     = 1'b0;
    uncorrectable_o = 1'b0;
    if (parity) begin
      if (int'(syndrome) > CW_BITS - 1) begin
        uncorrectable_o = 1'b1;
      end else begin
        corrected_o = 1'b1;
        for (int unsigned d = 0; d < K; d++) begin
          if (hamming_pos(d) == int'(syndrome)) data_o[d] = ~data_i[d];
        end
      end
    end else if (syndrome != '0) begin
      uncorrectable_o = 1'b1;
    end
  end

endmodule
