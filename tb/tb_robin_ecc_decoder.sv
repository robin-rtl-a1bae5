// tb_robin_ecc_decoder: stores reference-encoded blocks, injects error patterns and
// checks the corrected block and the per-codeword flags:
//   - no error;
//   - one error in a random cell (data or check) of every codeword at once (8 errors);
//   - a whole byte of 8 data errors, which ROBIN spreads over all 8 codewords;
//   - two errors in one codeword, which must be flagged uncorrectable for that codeword
//     only.
module tb_robin_ecc_decoder;
  import tb_robin_ref_pkg::*;

  logic         clk = 1'b0;
  logic [511:0] blk, blk_out;
  logic [63:0]  chk;
  logic [7:0]   corr, unc;
  int           checks = 0, failures = 0;

  robin_ecc_decoder dut (.block_i(blk), .check_i(chk), .block_o(blk_out),
                         .corrected_o(corr), .uncorrectable_o(unc));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random data bit of block owned by codeword n.
  function automatic int bit_of_cw(input int n);
    int i, j;
    i = $urandom % 8;
    j = $urandom % 8;
    return 64*i + 8*j + ((i + j + n) % 8);
  endfunction

  task automatic expect_out(input logic [511:0] good, input logic [7:0] ecorr,
                            input logic [7:0] eunc, input string what);
    #1;
    checks++;
    if (unc !== eunc || corr !== ecorr || (eunc == '0 && blk_out !== good)) begin
      failures++;
      $display("FAIL %s corr=%b unc=%b exp %b %b", what, corr, unc, ecorr, eunc);
    end
  endtask

  initial begin
    logic [511:0] good;
    logic [63:0]  gchk;
    int           n2, a, b;
    for (int t = 0; t < 300; t++) begin
      good = rand512();
      gchk = ref_check(good);
      // clean
      blk = good; chk = gchk;
      expect_out(good, '0, '0, "clean");
      // one error per codeword, in data or check part
      blk = good; chk = gchk;
      for (int n = 0; n < 8; n++) begin
        if ($urandom % 4 == 0) begin
          a = 8*n + int'($urandom % 8);
          chk[a] = ~chk[a];
        end else begin
          a = bit_of_cw(n);
          blk[a] = ~blk[a];
        end
      end
      expect_out(good, 8'hFF, '0, "one per codeword");
      // a whole byte wrong
      blk = good; chk = gchk;
      a = 8 * int'($urandom % 64);
      blk[a +: 8] = ~blk[a +: 8];
      expect_out(good, 8'hFF, '0, "byte burst");
      // two errors in codeword n2
      blk = good; chk = gchk;
      n2 = $urandom % 8;
      a = bit_of_cw(n2);
      do b = bit_of_cw(n2); while (b == a);
      blk[a] ^= 1'b1;
      blk[b] ^= 1'b1;
      expect_out(good, '0, 8'h1 << n2, "double");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
