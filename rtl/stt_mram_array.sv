// stt_mram_array: behavioural model (not synthesizable) of the STT-MRAM data array of
// the L2 cache, with the write-failure behaviour of STT-MRAM cells.
//
// The array holds LINES lines of LINE_BITS = 576 cells: the 512 data bits of a cache
// block followed by its 64 check bits. Default LINES = 16384 is a 1MB cache of 64B
// blocks (2048 sets x 8 ways). An STT-MRAM cell can fail only when a write has to flip
// it: a cell that already holds the new value cannot fail. Each cell that must flip keeps
// its old value with probability wf_ppm_i / 1e6, drawn independently per cell and write
// ($urandom), or always when its bit in force_fail_i is set (a deterministic hook for
// testing). The probability of a single cell's write failure follows from the write
// current and pulse width (Eq. 1 of the write-failure model); here it is given directly.
// Read disturbance and retention failure are not modelled.
//
// Timing: a write (we_i) takes effect at the rising clock edge. A read (re_i) returns
// rdata_o one cycle later and rdata_o holds until the next read. For every write,
// flips_o and fails_o report, from the next cycle on, how many cells had to switch and
// how many failed to. The array starts all zero (an all-zero line is a valid codeword).
module stt_mram_array
  import robin_pkg::*;
#(
  parameter int unsigned LINES = 16384,
  localparam int unsigned AW   = $clog2(LINES)
) (
  input  logic                 clk,
  input  logic                 we_i,
  input  logic                 re_i,
  input  logic [AW-1:0]        addr_i,
  input  logic [LINE_BITS-1:0] wdata_i,
  input  logic [31:0]          wf_ppm_i,
  input  logic [LINE_BITS-1:0] force_fail_i,
  output logic [LINE_BITS-1:0] rdata_o,
  output logic [9:0]           flips_o,
  output logic [9:0]           fails_o
);

  logic [LINE_BITS-1:0] mem [LINES];

  initial begin
    for (int unsigned a = 0; a < LINES; a++) mem[a] = '0;
    rdata_o = '0;
    flips_o = '0;
    fails_o = '0;
  end

  always @(posedge clk) begin
    if (we_i) begin
      logic [LINE_BITS-1:0] old_line, new_line;
      int unsigned nflip, nfail;
      old_line = mem[addr_i];
      new_line = wdata_i;
      nflip = 0;
      nfail = 0;
      for (int unsigned b = 0; b < LINE_BITS; b++) begin
        if (old_line[b] != wdata_i[b]) begin
          nflip++;
          if (force_fail_i[b] || (($urandom % 1000000) < wf_ppm_i)) begin
            new_line[b] = old_line[b];
            nfail++;
          end
        end
      end
      mem[addr_i] <= new_line;
      flips_o     <= 10'(nflip);
      fails_o     <= 10'(nfail);
    end
    if (re_i) rdata_o <= mem[addr_i];
  end

endmodule
