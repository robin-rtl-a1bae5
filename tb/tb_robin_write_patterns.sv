// tb_robin_write_patterns: how evenly the ROBIN grouping spreads the bit transitions of
// a block write over its eight codewords, for four synthetic write patterns modelled on
// the transition profiles of SPEC CPU2006 programs:
//   fp_dense   every 64-bit word is a double whose exponent bits (52..62) switch far
//              more often than the mantissa (bwaves-like);
//   int_narrow every 32-bit half is a narrow integer whose switching probability falls
//              from the low bits to the high bits (calculix-like);
//   fp_partial as fp_dense, but only the first 1..8 words of the block hold valid data
//              (cactusADM-like);
//   irregular  random switching with fewer transitions near 32-bit boundaries (mcf-like).
// For every write the testbench takes old XOR new, splits it into codewords with the
// robin_gather block, and counts per-codeword transitions. It does the same for the two
// conventional groupings (per-word: codeword n = word n; interleaved: codeword n = bit n
// of every byte). The figure of merit is the largest codeword count over the mean count
// (1.0 is a perfectly even spread). Checks: robin_gather loses no transition; for every
// pattern ROBIN's average max/mean is no worse than the better conventional grouping
// (within a 0.03 sampling margin), and on the three structured patterns it is at least
// 0.05 below the worse one. The switching probabilities are this testbench's own model,
// not measured data.
module tb_robin_write_patterns;
  import tb_robin_ref_pkg::*;

  localparam int WRITES = 3000;

  logic         clk = 1'b0;
  logic [511:0] diff;
  logic [63:0]  dw [8];
  int           checks = 0, failures = 0;

  robin_gather dut (.block_i(diff), .dw_o(dw));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit switches with probability pct/100
  function automatic bit flip(input int pct);
    return ($urandom % 100) < pct;
  endfunction

  // IEEE double: exponent bits 52..62 and the top mantissa bits switch most
  function automatic int fp_pct(input int b);
    if (b >= 52 && b <= 62) return 45;
    if (b >= 44 && b < 52) return 20;
    return 8;
  endfunction

  // narrow integer: switching probability falls with the bit position
  function automatic int int_pct(input int b);
    return (b < 3) ? 45 : (b < 6) ? 30 : (b < 9) ? 15 : (b < 12) ? 6 : 1;
  endfunction

  function automatic logic [511:0] pattern(input int kind);
    logic [511:0] d;
    int           valid;
    d = '0;
    valid = 1 + ($urandom % 8);
    for (int w = 0; w < 8; w++)
      for (int b = 0; b < 64; b++)
        case (kind)
          0: d[64*w + b] = flip(fp_pct(b));
          1: d[64*w + b] = flip(int_pct(b % 32));
          2: d[64*w + b] = (w < valid) && flip(fp_pct(b));
          default: d[64*w + b] = flip(((b % 32) < 2 || (b % 32) > 29) ? 3 : 25);
        endcase
    return d;
  endfunction

  initial begin
    string names [4] = '{"fp_dense", "int_narrow", "fp_partial", "irregular"};
    real   sum_robin, sum_word, sum_intl;
    int    nwr, cr [8], cw [8], ci [8], tot, mr, mw, mi;
    for (int kind = 0; kind < 4; kind++) begin
      sum_robin = 0.0; sum_word = 0.0; sum_intl = 0.0; nwr = 0;
      for (int t = 0; t < WRITES; t++) begin
        diff = pattern(kind);
        #1;
        tot = $countones(diff);
        if (tot == 0) continue;
        mr = 0; mw = 0; mi = 0;
        for (int n = 0; n < 8; n++) begin
          cr[n] = $countones(dw[n]);
          cw[n] = $countones(diff[64*n +: 64]);
          ci[n] = 0;
          for (int y = 0; y < 64; y++) ci[n] += int'(diff[8*y + n]);
          if (cr[n] > mr) mr = cr[n];
          if (cw[n] > mw) mw = cw[n];
          if (ci[n] > mi) mi = ci[n];
        end
        checks++;
        if (cr.sum() != tot) begin
          failures++;
          $display("FAIL gather lost transitions: %0d of %0d", cr.sum(), tot);
        end
        sum_robin += real'(mr) * 8.0 / real'(tot);
        sum_word  += real'(mw) * 8.0 / real'(tot);
        sum_intl  += real'(mi) * 8.0 / real'(tot);
        nwr++;
      end
      $display("%-10s writes=%0d  max/mean per-word=%.3f interleaved=%.3f ROBIN=%.3f",
               names[kind], nwr, sum_word / nwr, sum_intl / nwr, sum_robin / nwr);
      // ROBIN is never worse than the better conventional grouping (3% sampling margin)
      checks++;
      if (sum_robin > sum_word + 0.03 * nwr || sum_robin > sum_intl + 0.03 * nwr) begin
        failures++;
        $display("FAIL %s: ROBIN less even than a conventional grouping", names[kind]);
      end
      // and on the structured patterns it clearly beats the worse one
      if (kind < 3) begin
        checks++;
        if (sum_robin > (sum_word > sum_intl ? sum_word : sum_intl) - 0.05 * nwr) begin
          failures++;
          $display("FAIL %s: ROBIN no better than the worse grouping", names[kind]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
