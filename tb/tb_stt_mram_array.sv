// tb_stt_mram_array: checks the STT-MRAM array model: one-cycle read latency, data kept
// per line, and the write-failure rule (only cells that must flip can fail; forced
// failures keep the old value; probability 0 never fails, probability 1 always fails,
// 50% fails about half the time). Uses a small array.
module tb_stt_mram_array;
  import tb_robin_ref_pkg::*;

  localparam int LINES = 64;
  localparam int LB = 576;

  logic          clk = 1'b0;
  logic          we = 1'b0, re = 1'b0;
  logic [5:0]    addr = '0;
  logic [LB-1:0] wdata = '0, force_fail = '0, rdata;
  logic [31:0]   ppm = '0;
  logic [9:0]    flips, fails;
  logic [LB-1:0] shadow [LINES];
  int            checks = 0, failures = 0;

  stt_mram_array #(.LINES(LINES)) dut (
    .clk(clk), .we_i(we), .re_i(re), .addr_i(addr), .wdata_i(wdata),
    .wf_ppm_i(ppm), .force_fail_i(force_fail), .rdata_o(rdata),
    .flips_o(flips), .fails_o(fails));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LB-1:0] rand576();
    return {rand64(), rand512()};
  endfunction

  task automatic wr(input int a, input logic [LB-1:0] d);
    @(negedge clk);
    we = 1'b1; addr = 6'(a); wdata = d;
    @(negedge clk);
    we = 1'b0;
  endtask

  task automatic rd(input int a, output logic [LB-1:0] q);
    @(negedge clk);
    re = 1'b1; addr = 6'(a);
    @(posedge clk);
    #1;
    re = 1'b0;
    q = rdata;
  endtask

  task automatic rd_check(input int a, input logic [LB-1:0] exp);
    logic [LB-1:0] q;
    rd(a, q);
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL read line %0d", a);
    end
  endtask

  initial begin
    logic [LB-1:0] d, mask, expv, q;
    int            total_flip, total_fail;
    for (int a = 0; a < LINES; a++) shadow[a] = '0;
    // initial content is zero
    rd_check(5, '0);
    // writes without failures; flips_o counts the cells that had to switch
    for (int t = 0; t < 200; t++) begin
      int a;
      a = $urandom % LINES;
      d = rand576();
      wr(a, d);
      checks++;
      if (32'(flips) != $countones(d ^ shadow[a]) || fails != 0) failures++;
      shadow[a] = d;
      rd_check(a, d);
    end
    for (int a = 0; a < LINES; a++) rd_check(a, shadow[a]);
    // forced failures: only cells that must flip keep their old value
    for (int t = 0; t < 100; t++) begin
      int a;
      a = $urandom % LINES;
      d = rand576();
      mask = rand576() & rand576();
      force_fail = mask;
      wr(a, d);
      force_fail = '0;
      expv = (d & ~mask) | (shadow[a] & mask);
      checks++;
      if (32'(fails) != $countones((d ^ shadow[a]) & mask)) begin
        failures++;
        $display("FAIL forced fail count %0d", fails);
      end
      shadow[a] = expv;
      rd_check(a, expv);
    end
    // probability 1: every needed flip fails, line unchanged
    ppm = 32'd1000000;
    wr(3, ~shadow[3]);
    checks++;
    if (fails != 10'd576 || flips != 10'd576) failures++;
    rd_check(3, shadow[3]);
    // rewriting the same value flips nothing and so cannot fail
    wr(3, shadow[3]);
    checks++;
    if (fails != 0 || flips != 0) failures++;
    // probability 1/2: about half of the flips fail, and a failed cell keeps its old value
    ppm = 32'd500000;
    total_flip = 0;
    total_fail = 0;
    for (int t = 0; t < 40; t++) begin
      d = rand576();
      wr(7, d);
      total_flip += 32'(flips);
      total_fail += 32'(fails);
      rd(7, q);
      checks++;
      if (((q ^ d) & ~(d ^ shadow[7])) != '0 || $countones(q ^ d) != 32'(fails)) begin
        failures++;
        $display("FAIL random failure rule");
      end
      shadow[7] = q;
    end
    checks++;
    if (total_fail * 10 < total_flip * 4 || total_fail * 10 > total_flip * 6) begin
      failures++;
      $display("FAIL failure ratio %0d/%0d", total_fail, total_flip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
