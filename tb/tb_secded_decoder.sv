// tb_secded_decoder: encodes random datawords with the reference encoder, flips zero,
// one or two of the 72 codeword bits, and checks the decoder's corrected data and its
// corrected / uncorrectable flags.
module tb_secded_decoder;
  import tb_robin_ref_pkg::*;

  logic        clk = 1'b0;
  logic [63:0] data, dout;
  logic [7:0]  chk;
  logic        corr, unc;
  int          checks = 0, failures = 0;

  secded_decoder dut (.data_i(data), .check_i(chk), .data_o(dout),
                      .corrected_o(corr), .uncorrectable_o(unc));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input logic [63:0] d, input int nerr);
    logic [71:0] cw, flip;
    int a, b;
    cw = {ref_encode(d), d};
    flip = '0;
    a = $urandom % 72;
    b = (a + 1 + ($urandom % 71)) % 72;
    if (nerr >= 1) flip[a] = 1'b1;
    if (nerr >= 2) flip[b] = 1'b1;
    cw ^= flip;
    data = cw[63:0];
    chk  = cw[71:64];
    #1;
    checks++;
    case (nerr)
      0: if (dout !== d || corr || unc) begin
           failures++; $display("FAIL clean d=%h", d);
         end
      1: if (dout !== d || !corr || unc) begin
           failures++; $display("FAIL single d=%h bit=%0d", d, a);
         end
      default: if (!unc || corr) begin
           failures++; $display("FAIL double d=%h bits=%0d,%0d", d, a, b);
         end
    endcase
  endtask

  initial begin
    for (int t = 0; t < 500; t++) try(rand64(), 0);
    for (int t = 0; t < 3000; t++) try(rand64(), 1);
    for (int t = 0; t < 3000; t++) try(rand64(), 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
