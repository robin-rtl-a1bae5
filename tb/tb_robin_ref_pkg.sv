// tb_robin_ref_pkg: reference models used by the testbenches, written independently of
// the RTL.
//
// ref_encode builds the 72-bit extended Hamming codeword position by position (positions
// 1..71, check bits at powers of two, overall parity last) and returns the 8 check bits
// in the order {overall, p64, p32, p16, p8, p4, p2, p1}. ref_gather/ref_scatter apply the
// oblique interleaving rule "codeword n takes bit (i+j+n) mod 8 of byte j of word i"
// with data bit 8*i + j of the codeword coming from word i, byte j.
package tb_robin_ref_pkg;

  function automatic logic [7:0] ref_encode(input logic [63:0] d);
    logic [71:0] pos;   // pos[p] = value at Hamming position p (p = 1..71)
    logic [7:0]  c;
    int          k;
    pos = '0;
    k = 0;
    for (int p = 1; p < 72; p++) begin
      if (p != 1 && p != 2 && p != 4 && p != 8 && p != 16 && p != 32 && p != 64) begin
        pos[p] = d[k];
        k++;
      end
    end
    c = '0;
    for (int b = 0; b < 7; b++)
      for (int p = 1; p < 72; p++)
        if (p[b]) c[b] ^= pos[p];
    c[7] = ^d ^ ^c[6:0];
    return c;
  endfunction

  function automatic logic [63:0] ref_gather1(input logic [511:0] blk, input int n);
    logic [63:0] w;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        w[8*i + j] = blk[64*i + 8*j + ((i + j + n) % 8)];
    return w;
  endfunction

  function automatic logic [511:0] ref_scatter(input logic [63:0] dw [8]);
    logic [511:0] blk;
    for (int n = 0; n < 8; n++)
      for (int i = 0; i < 8; i++)
        for (int j = 0; j < 8; j++)
          blk[64*i + 8*j + ((i + j + n) % 8)] = dw[n][8*i + j];
    return blk;
  endfunction

  function automatic logic [63:0] ref_check(input logic [511:0] blk);
    logic [63:0] chk;
    for (int n = 0; n < 8; n++) chk[8*n +: 8] = ref_encode(ref_gather1(blk, n));
    return chk;
  endfunction

  // Codeword that owns block bit p under the ROBIN rule.
  function automatic int ref_owner(input int p);
    int i, j, b;
    i = p / 64;
    j = (p / 8) % 8;
    b = p % 8;
    return ((b - i - j) % 8 + 8) % 8;
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom, $urandom};
  endfunction

  function automatic logic [511:0] rand512();
    logic [511:0] v;
    for (int q = 0; q < 16; q++) v[32*q +: 32] = $urandom;
    return v;
  endfunction

endpackage
