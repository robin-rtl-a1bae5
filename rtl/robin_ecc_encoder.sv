// robin_ecc_encoder: write-path ECC generator for one 512-bit cache block in the ROBIN
// configuration.
//
// robin_gather forms the eight ROBIN datawords; eight SEC-DED(72,64) encoders produce
// ECC_0..ECC_7, each eight bits wide. The check bits are packed as check_o[8n +: 8] =
// ECC_n. The paper shows ECC_0..ECC_7 as separate 8-bit fields but not where they are
// stored; the packing is this design's choice. The data bits are stored unpermuted,
// so ROBIN changes only which bits feed each encoder.
//
// Interface: block_i (512) in, check_o (64) out. Combinational.
module robin_ecc_encoder
  import robin_pkg::*;
(
  input  block_t                block_i,
  output logic [CHECK_BITS-1:0] check_o
);

  dataword_t dw [NCW];

  robin_gather u_gather (
    .block_i (block_i),
    .dw_o    (dw)
  );

  for (genvar n = 0; n < NCW; n++) begin : g_enc
    secded_encoder u_enc (
      .data_i  (dw[n]),
      .check_o (check_o[n*R +: R])
    );
  end

endmodule
