// tb_secded_encoder: checks secded_encoder against the position-by-position reference
// encoder, on fixed vectors (all zeros, single ones, all ones) and random datawords.
module tb_secded_encoder;
  import tb_robin_ref_pkg::*;

  logic        clk = 1'b0;
  logic [63:0] data;
  logic [7:0]  check;
  int          checks = 0, failures = 0;

  secded_encoder dut (.data_i(data), .check_o(check));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input logic [63:0] d);
    data = d;
    #1;
    checks++;
    if (check !== ref_encode(d)) begin
      failures++;
      $display("FAIL data=%h check=%h expected=%h", d, check, ref_encode(d));
    end
  endtask

  initial begin
    try('0);
    checks++;
    if (check !== 8'h00) failures++;
    try(64'h1);                     // data bit 0 at position 3: p1, p2, overall
    checks++;
    if (check !== 8'h83) failures++;
    for (int b = 0; b < 64; b++) try(64'h1 << b);
    try('1);
    for (int t = 0; t < 2000; t++) try(rand64());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
