// tb_robin_ecc_encoder: compares the 64 check bits of robin_ecc_encoder with the
// reference (reference gather + reference SEC-DED encoder) on structured and random
// blocks, including blocks whose transitions follow floating-point and narrow-integer
// patterns.
module tb_robin_ecc_encoder;
  import tb_robin_ref_pkg::*;

  logic         clk = 1'b0;
  logic [511:0] blk;
  logic [63:0]  chk;
  int           checks = 0, failures = 0;

  robin_ecc_encoder dut (.block_i(blk), .check_o(chk));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input logic [511:0] b);
    blk = b;
    #1;
    checks++;
    if (chk !== ref_check(b)) begin
      failures++;
      $display("FAIL check=%h expected=%h", chk, ref_check(b));
    end
  endtask

  initial begin
    try('0);
    try('1);
    for (int p = 0; p < 512; p++) try(512'h1 << p);
    for (int t = 0; t < 500; t++) try(rand512());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
