// robin_l2_data_array: ROBIN-protected STT-MRAM data array of the L2 cache (top).
//
// A write stores a 64-byte block together with the 64 check bits that
// robin_ecc_encoder computes for it (eight SEC-DED(72,64) codewords formed by the
// oblique ROBIN interleaving). A read fetches the 576 stored cells and passes them
// through robin_ecc_decoder, which corrects one error per codeword and flags codewords
// with two. The cache controller that decides which set and way to access is outside
// this block: the paper gives only its configuration (1MB, 8-way, 64B blocks,
// write-back), so set and way come in as ports.
//
// Interface: one request per cycle (req_valid_i, req_write_i, req_set_i, req_way_i,
// req_wdata_i); no back-pressure. A read's response appears with resp_valid_o two
// cycles after the request (one cycle of array access, one register after the
// decoder); the paper gives no latency, so these are this design's choices. Writes have
// no response. wf_ppm_i and force_fail_i control the write-failure model of the
// array; wr_flips_o / wr_fails_o report the switching cells and failed cells of the last
// write.
//
// rst_n is an asynchronous reset of the response registers and is also the disable
// condition of the timing assertion below, which samples it on the clock; a lint tool may
// report that mix, and it is intended.
module robin_l2_data_array
  import robin_pkg::*;
#(
  parameter int unsigned SETS = 2048,
  parameter int unsigned WAYS = 8,
  localparam int unsigned SW  = $clog2(SETS),
  localparam int unsigned WW  = $clog2(WAYS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid_i,
  input  logic                 req_write_i,
  input  logic [SW-1:0]        req_set_i,
  input  logic [WW-1:0]        req_way_i,
  input  block_t               req_wdata_i,
  output logic                 resp_valid_o,
  output block_t               resp_rdata_o,
  output logic [NCW-1:0]       resp_corrected_o,
  output logic [NCW-1:0]       resp_uncorrectable_o,
  input  logic [31:0]          wf_ppm_i,
  input  logic [LINE_BITS-1:0] force_fail_i,
  output logic [9:0]           wr_flips_o,
  output logic [9:0]           wr_fails_o
);

  logic [CHECK_BITS-1:0] wr_check;
  logic [LINE_BITS-1:0]  rd_line;
  logic                  rd_pending;
  block_t                dec_block;
  logic [NCW-1:0]        dec_corr, dec_unc;

  robin_ecc_encoder u_enc (
    .block_i (req_wdata_i),
    .check_o (wr_check)
  );

  stt_mram_array #(.LINES(SETS * WAYS)) u_array (
    .clk          (clk),
    .we_i         (req_valid_i && req_write_i),
    .re_i         (req_valid_i && !req_write_i),
    .addr_i       ({req_set_i, req_way_i}),
    .wdata_i      ({wr_check, req_wdata_i}),
    .wf_ppm_i     (wf_ppm_i),
    .force_fail_i (force_fail_i),
    .rdata_o      (rd_line),
    .flips_o      (wr_flips_o),
    .fails_o      (wr_fails_o)
  );

  robin_ecc_decoder u_dec (
    .block_i         (rd_line[BLOCK_BITS-1:0]),
    .check_i         (rd_line[LINE_BITS-1:BLOCK_BITS]),
    .block_o         (dec_block),
    .corrected_o     (dec_corr),
    .uncorrectable_o (dec_unc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pending           <= 1'b0;
      resp_valid_o         <= 1'b0;
      resp_rdata_o         <= '0;
      resp_corrected_o     <= '0;
      resp_uncorrectable_o <= '0;
    end else begin
      rd_pending   <= req_valid_i && !req_write_i;
      resp_valid_o <= rd_pending;
      if (rd_pending) begin
        resp_rdata_o         <= dec_block;
        resp_corrected_o     <= dec_corr;
        resp_uncorrectable_o <= dec_unc;
      end
    end
  end

  // A response comes exactly two cycles after a read request, and only then.
  a_resp_timing : assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid_o == $past(req_valid_i && !req_write_i, 2));

endmodule
