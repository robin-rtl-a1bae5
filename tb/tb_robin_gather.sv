// tb_robin_gather: checks the ROBIN data-bit selection against the reference rule, a
// few cells read off the mapping chart (word 0 byte 0 bit b -> ECC_b; word 1 byte 0
// bit 0 -> ECC_7), and the balance properties: each codeword takes exactly one bit from
// every byte and every block bit lands in exactly one codeword.
module tb_robin_gather;
  import tb_robin_ref_pkg::*;

  logic         clk = 1'b0;
  logic [511:0] blk;
  logic [63:0]  dw [8];
  int           checks = 0, failures = 0;

  robin_gather dut (.block_i(blk), .dw_o(dw));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Which codeword (or -1) sees a one when only block bit p is set.
  function automatic int owner_seen();
    int who = -1, cnt = 0;
    for (int n = 0; n < 8; n++) begin
      if (dw[n] != '0) begin
        who = n;
        cnt += $countones(dw[n]);
      end
    end
    return (cnt == 1) ? who : -2;
  endfunction

  initial begin
    // one-hot sweep: every block bit lands in exactly one codeword, the right one
    for (int p = 0; p < 512; p++) begin
      blk = '0;
      blk[p] = 1'b1;
      #1;
      checks++;
      if (owner_seen() != ref_owner(p)) begin
        failures++;
        $display("FAIL bit %0d seen in cw %0d expected %0d", p, owner_seen(), ref_owner(p));
      end
    end
    // chart cells: word 0, byte 0, bit b belongs to ECC_b
    for (int b = 0; b < 8; b++) begin
      blk = '0;
      blk[b] = 1'b1;
      #1;
      checks++;
      if (owner_seen() != b) failures++;
    end
    blk = '0;
    blk[64] = 1'b1;                 // word 1, byte 0, bit 0 -> ECC_7
    #1;
    checks++;
    if (owner_seen() != 7) failures++;
    // each codeword holds exactly one bit of each byte: a block with one byte all ones
    for (int y = 0; y < 64; y++) begin
      blk = '0;
      blk[8*y +: 8] = 8'hFF;
      #1;
      for (int n = 0; n < 8; n++) begin
        checks++;
        if ($countones(dw[n]) != 1) failures++;
      end
    end
    // random blocks against the reference
    for (int t = 0; t < 300; t++) begin
      blk = rand512();
      #1;
      for (int n = 0; n < 8; n++) begin
        checks++;
        if (dw[n] !== ref_gather1(blk, n)) begin
          failures++;
          $display("FAIL random cw %0d", n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
