// robin_ecc_decoder: read-path checker and corrector for one 512-bit cache block in the
// ROBIN configuration.
//
// The stored block is split into the eight ROBIN datawords by robin_gather, each is
// checked against its stored ECC_n (check_i[8n +: 8]) by a SEC-DED(72,64) decoder, and
// the corrected datawords are put back in block order by robin_scatter. Every codeword
// corrects one error and detects two on its own, so a block with up to eight errors is
// corrected as long as no codeword holds more than one of them.
//
// Interface: block_i (512), check_i (64) in; block_o (512, corrected), corrected_o[n] and
// uncorrectable_o[n] per codeword out. Combinational.
module robin_ecc_decoder
  import robin_pkg::*;
(
  input  block_t                block_i,
  input  logic [CHECK_BITS-1:0] check_i,
  output block_t                block_o,
  output logic [NCW-1:0]        corrected_o,
  output logic [NCW-1:0]        uncorrectable_o
);

  dataword_t dw_raw [NCW];
  dataword_t dw_fix [NCW];

  robin_gather u_gather (
    .block_i (block_i),
    .dw_o    (dw_raw)
  );

  for (genvar n = 0; n < NCW; n++) begin : g_dec
    secded_decoder u_dec (
      .data_i          (dw_raw[n]),
      .check_i         (check_i[n*R +: R]),
      .data_o          (dw_fix[n]),
      .corrected_o     (corrected_o[n]),
      .uncorrectable_o (uncorrectable_o[n])
    );
  end

  robin_scatter u_scatter (
    .dw_i    (dw_fix),
    .block_o (block_o)
  );

endmodule
