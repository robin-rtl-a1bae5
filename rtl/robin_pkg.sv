// robin_pkg: constants, types and index functions shared by the ROBIN ECC blocks.
//
// A cache block of BLOCK_BITS = 512 bits holds WORDS = 8 words of 64 bits, each of
// BYTES = 8 bytes of BITS = 8 bits. Bit b of byte j of word i sits at block bit
// i*64 + j*8 + b (word 0, byte 0, bit 0 is block bit 0). The block is protected by
// NCW = 8 SEC-DED(72,64) codewords: K = 64 data bits and R = 8 check bits each.
//
// The ROBIN mapping (incremental oblique interleaving) puts into codeword n the bit at
// position (i + j + n) mod 8 of byte j of word i, for every word i and byte j, so each
// codeword takes one bit from each of the 64 bytes, eight bits from each word, and each
// bit position within a byte equally often. That rule is the paper's; the order of the
// 64 selected bits inside a codeword (data bit m = 8*i + j) is this design's choice,
// since the code does not depend on it for its correction capability.
package robin_pkg;

  localparam int unsigned WORDS      = 8;
  localparam int unsigned BYTES      = 8;   // bytes per word
  localparam int unsigned BITS       = 8;   // bits per byte
  localparam int unsigned WORD_BITS  = BYTES * BITS;          // 64
  localparam int unsigned BLOCK_BITS = WORDS * WORD_BITS;     // 512
  localparam int unsigned NCW        = 8;   // codewords per block
  localparam int unsigned K          = 64;  // data bits per codeword
  localparam int unsigned R          = 8;   // check bits per codeword
  localparam int unsigned CW_BITS    = K + R;                 // 72
  localparam int unsigned CHECK_BITS = NCW * R;               // 64
  localparam int unsigned LINE_BITS  = BLOCK_BITS + CHECK_BITS; // 576 stored cells

  typedef logic [BLOCK_BITS-1:0] block_t;
  typedef logic [K-1:0]          dataword_t;
  typedef logic [R-1:0]          check_t;
  typedef logic [CW_BITS-1:0]    codeword_t;

  // Block bit that supplies data bit m of ROBIN codeword n (Eq. 4 of the method):
  // m = 8*i + j selects word i, byte j; the bit inside the byte is (i + j + n) mod 8.
  function automatic int unsigned robin_src(input int unsigned n, input int unsigned m);
    int unsigned i, j;
    i = m / BYTES;
    j = m % BYTES;
    return i * WORD_BITS + j * BITS + ((i + j + n) % BITS);
  endfunction

  // Codeword that owns block bit p (inverse of robin_src).
  function automatic int unsigned robin_cw_of(input int unsigned p);
    int unsigned i, j, b;
    i = p / WORD_BITS;
    j = (p / BITS) % BYTES;
    b = p % BITS;
    return (b + 2 * BITS - i - j) % BITS;
  endfunction

  // Data bit index inside its codeword of block bit p.
  function automatic int unsigned robin_bit_of(input int unsigned p);
    return (p / WORD_BITS) * BYTES + (p / BITS) % BYTES;
  endfunction

  // SEC-DED(72,64) as an extended Hamming code. Code positions 1..71: the check bits sit
  // at the powers of two (1,2,4,...,64), the 64 data bits fill the other positions in
  // increasing order. Returns the code position (3..71) of data bit d: start at d + 3 and
  // step over each power of two 4, 8, ..., 64 that has been reached.
  function automatic int unsigned hamming_pos(input int unsigned d);
    int unsigned pos;
    pos = d + 3;
    for (int unsigned k = 2; k < R - 1; k++) begin
      if (pos >= (32'd1 << k)) pos++;
    end
    return pos;
  endfunction

endpackage
