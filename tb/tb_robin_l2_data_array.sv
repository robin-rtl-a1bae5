// tb_robin_l2_data_array: end-to-end test of the ROBIN-protected L2 data array at its
// default size (2048 sets x 8 ways of 64-byte blocks).
//
// Phases and the mechanisms each must exercise (all counted; one that never happens is
// a failure):
//   clean       write random blocks, read them back unchanged, no flags, 2-cycle latency;
//   silent      rewrite a block with its own value: no cell switches, none can fail;
//   corrected   write with one forced cell failure in each of the 8 codewords (8 faulty
//               cells in the block): read returns the written block, all 8 corrected;
//   byte burst  force a failure in all switching cells of one byte: ROBIN spreads them
//               over different codewords, so the block is still corrected;
//   double      two forced failures in one codeword: flagged uncorrectable there only;
//   random      write failures drawn at 0.2% per switching cell: every read either
//               returns the written block or flags an uncorrectable codeword.
module tb_robin_l2_data_array;
  import tb_robin_ref_pkg::*;

  localparam int SETS = 2048;
  localparam int WAYS = 8;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         req_valid = 1'b0, req_write = 1'b0;
  logic [10:0]  req_set = '0;
  logic [2:0]   req_way = '0;
  logic [511:0] req_wdata = '0;
  logic         resp_valid;
  logic [511:0] resp_rdata;
  logic [7:0]   resp_corr, resp_unc;
  logic [31:0]  wf_ppm = '0;
  logic [575:0] force_fail = '0;
  logic [9:0]   wr_flips, wr_fails;

  int checks = 0, failures = 0;
  int n_clean = 0, n_silent = 0, n_corr = 0, n_burst = 0, n_double = 0;
  int n_rand_ok = 0, n_rand_corr = 0, n_rand_unc = 0, n_rand_fail_cells = 0;
  longint cycle = 0;

  logic [575:0] stored [int];   // exact cell contents of lines the test has written
  bit           unknown [int];  // lines written under random failures: contents unknown

  robin_l2_data_array dut (
    .clk(clk), .rst_n(rst_n),
    .req_valid_i(req_valid), .req_write_i(req_write), .req_set_i(req_set),
    .req_way_i(req_way), .req_wdata_i(req_wdata),
    .resp_valid_o(resp_valid), .resp_rdata_o(resp_rdata),
    .resp_corrected_o(resp_corr), .resp_uncorrectable_o(resp_unc),
    .wf_ppm_i(wf_ppm), .force_fail_i(force_fail),
    .wr_flips_o(wr_flips), .wr_fails_o(wr_fails));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [575:0] line_of(input logic [511:0] d);
    return {ref_check(d), d};
  endfunction

  function automatic logic [575:0] old_line(input int idx);
    return stored.exists(idx) ? stored[idx] : '0;
  endfunction

  // Write block d to line idx with forced failure mask m; returns the cells stored.
  task automatic do_write(input int idx, input logic [511:0] d, input logic [575:0] m);
    logic [575:0] newl, oldl;
    oldl = old_line(idx);
    newl = line_of(d);
    @(negedge clk);
    req_valid = 1'b1; req_write = 1'b1;
    {req_set, req_way} = 14'(idx);
    req_wdata = d;
    force_fail = m;
    @(negedge clk);
    req_valid = 1'b0;
    force_fail = '0;
    checks++;
    if (wf_ppm == 0) begin
      if (32'(wr_flips) != $countones(oldl ^ newl) ||
          32'(wr_fails) != $countones((oldl ^ newl) & m)) begin
        failures++;
        $display("FAIL write counts flips=%0d fails=%0d", wr_flips, wr_fails);
      end
      stored[idx] = (newl & ~m) | (oldl & m);
    end else begin
      if (!unknown.exists(idx) && 32'(wr_flips) != $countones(oldl ^ newl)) begin
        failures++;
        $display("FAIL write flips=%0d", wr_flips);
      end
      n_rand_fail_cells += 32'(wr_fails);
      stored.delete(idx);
      unknown[idx] = 1'b1;
    end
  endtask

  // Read line idx; checks the 2-cycle latency and returns data and flags.
  task automatic do_read(input int idx, output logic [511:0] q, output logic [7:0] c,
                         output logic [7:0] u);
    longint t0;
    @(negedge clk);
    req_valid = 1'b1; req_write = 1'b0;
    {req_set, req_way} = 14'(idx);
    t0 = cycle;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid && cycle < t0 + 10) @(negedge clk);
    checks++;
    if (!resp_valid || cycle - t0 != 2) begin
      failures++;
      $display("FAIL read latency %0d", cycle - t0);
    end
    q = resp_rdata; c = resp_corr; u = resp_unc;
  endtask

  // A cell of codeword n (data or check) that must switch from old to new, or -1.
  function automatic int switching_cell(input logic [575:0] o, input logic [575:0] nw,
                                        input int n, input int skip);
    int cand [$];
    for (int p = 0; p < 512; p++)
      if (o[p] != nw[p] && ref_owner(p) == n && p != skip) cand.push_back(p);
    for (int p = 512 + 8*n; p < 520 + 8*n; p++)
      if (o[p] != nw[p] && p != skip) cand.push_back(p);
    if (cand.size() == 0) return -1;
    return cand[$urandom % cand.size()];
  endfunction

  initial begin
    logic [511:0] d, q;
    logic [7:0]   c, u;
    logic [575:0] m, nl;
    int           idx, pos1, pos2, n2, y;
    int           lines [$];

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // clean writes and reads
    for (int t = 0; t < 64; t++) begin
      idx = $urandom % (SETS * WAYS);
      d = rand512();
      do_write(idx, d, '0);
      lines.push_back(idx);
      do_read(idx, q, c, u);
      checks++;
      if (q !== d || c != 0 || u != 0) begin
        failures++;
        $display("FAIL clean line %0d", idx);
      end else n_clean++;
    end
    // an unwritten line reads as zero
    do_read((lines[0] + 1) % (SETS * WAYS), q, c, u);
    checks++;
    if (!stored.exists((lines[0] + 1) % (SETS * WAYS)) && (q != 0 || c != 0 || u != 0)) begin
      failures++;
      $display("FAIL unwritten line not zero");
    end

    // silent rewrite
    idx = lines[1];
    d = stored[idx][511:0];
    do_write(idx, d, '1);
    checks++;
    if (wr_flips != 0 || wr_fails != 0) begin
      failures++;
      $display("FAIL silent rewrite flips=%0d fails=%0d", wr_flips, wr_fails);
    end else n_silent++;

    // one forced failure per codeword
    for (int t = 0; t < 40; t++) begin
      idx = lines[t % lines.size()];
      d = rand512();
      nl = line_of(d);
      m = '0;
      for (int n = 0; n < 8; n++) begin
        pos1 = switching_cell(old_line(idx), nl, n, -1);
        if (pos1 >= 0) m[pos1] = 1'b1;
      end
      do_write(idx, d, m);
      do_read(idx, q, c, u);
      checks++;
      if (q !== d || u != 0 || c != 8'hFF) begin
        if (!(q === d && u == 0 && $countones(m) < 8)) begin
          failures++;
          $display("FAIL corrected case: corr=%b unc=%b faults=%0d", c, u, $countones(m));
        end
      end else n_corr++;
    end

    // byte burst: every switching cell of one data byte fails
    for (int t = 0; t < 20; t++) begin
      idx = lines[t % lines.size()];
      d = rand512();
      nl = line_of(d);
      y = $urandom % 64;
      m = '0;
      m[8*y +: 8] = 8'hFF;
      do_write(idx, d, m);
      do_read(idx, q, c, u);
      checks++;
      if (q !== d || u != 0) begin
        failures++;
        $display("FAIL byte burst");
      end else if ($countones(c) >= 2) n_burst++;
    end

    // two failures in one codeword
    for (int t = 0; t < 20; t++) begin
      idx = lines[t % lines.size()];
      d = rand512();
      nl = line_of(d);
      n2 = $urandom % 8;
      pos1 = switching_cell(old_line(idx), nl, n2, -1);
      pos2 = switching_cell(old_line(idx), nl, n2, pos1);
      m = '0;
      if (pos1 >= 0 && pos2 >= 0) begin
        m[pos1] = 1'b1;
        m[pos2] = 1'b1;
      end
      do_write(idx, d, m);
      do_read(idx, q, c, u);
      checks++;
      if (m != '0) begin
        if (u != (8'h1 << n2)) begin
          failures++;
          $display("FAIL double: unc=%b expected cw %0d", u, n2);
        end else n_double++;
      end
    end

    // random write failures at 0.2% per switching cell
    wf_ppm = 32'd2000;
    for (int t = 0; t < 400; t++) begin
      idx = $urandom % (SETS * WAYS);
      d = rand512();
      do_write(idx, d, '0);
      do_read(idx, q, c, u);
      checks++;
      if (u != 0) n_rand_unc++;
      else if (q !== d) begin
        failures++;
        $display("FAIL random: wrong data without an uncorrectable flag");
      end else if (c != 0) n_rand_corr++;
      else n_rand_ok++;
    end
    wf_ppm = '0;

    $display("mechanisms: clean=%0d silent=%0d corrected=%0d burst=%0d double=%0d",
             n_clean, n_silent, n_corr, n_burst, n_double);
    $display("random failures: cells=%0d reads ok=%0d corrected=%0d uncorrectable=%0d",
             n_rand_fail_cells, n_rand_ok, n_rand_corr, n_rand_unc);
    if (n_clean == 0)  begin failures++; $display("FAIL no clean read"); end
    if (n_silent == 0) begin failures++; $display("FAIL no silent rewrite"); end
    if (n_corr == 0)   begin failures++; $display("FAIL no corrected read"); end
    if (n_burst == 0)  begin failures++; $display("FAIL no byte burst spread"); end
    if (n_double == 0) begin failures++; $display("FAIL no double error"); end
    if (n_rand_corr == 0) begin failures++; $display("FAIL no random failure corrected"); end
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
