// tb_robin_scatter: checks that robin_scatter puts dataword bits where the reference
// rule says, one-hot and random, and that it inverts the reference gather.
module tb_robin_scatter;
  import tb_robin_ref_pkg::*;

  logic         clk = 1'b0;
  logic [63:0]  dw [8];
  logic [511:0] blk, blk_in;
  int           checks = 0, failures = 0;

  robin_scatter dut (.dw_i(dw), .block_o(blk));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 8; n++) begin
      for (int m = 0; m < 64; m++) begin
        for (int q = 0; q < 8; q++) dw[q] = '0;
        dw[n][m] = 1'b1;
        #1;
        checks++;
        // data bit m = 8i+j of cw n goes to bit (i+j+n)%8 of byte j of word i
        if (blk !== (512'h1 << (64*(m/8) + 8*(m%8) + ((m/8 + m%8 + n) % 8)))) begin
          failures++;
          $display("FAIL cw %0d bit %0d", n, m);
        end
      end
    end
    for (int t = 0; t < 300; t++) begin
      blk_in = rand512();
      for (int n = 0; n < 8; n++) dw[n] = ref_gather1(blk_in, n);
      #1;
      checks++;
      if (blk !== blk_in || blk !== ref_scatter(dw)) begin
        failures++;
        $display("FAIL round trip");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
