# ROBIN: oblique-interleaved SEC-DED for an STT-MRAM L2 data array

STT-MRAM cells fail to write at random, and a cell can only fail when a write has to
switch it. A cell that already holds the new value is safe. Suppose a 64-byte cache block is
protected by eight SEC-DED(72,64) codewords. Each codeword can absorb one failed cell. The
block is written correctly only if no codeword collects two or more failures. For a fixed
number of switching cells in a write, that chance is highest when the switching cells are
spread evenly over the eight codewords. It drops quickly when a few codewords take most of
them.

Real write data is not uniform:

* In floating-point data, the exponent bits switch much more often than the mantissa bits.
* Narrow integers switch mostly in their low bits.
* Partly valid blocks leave whole words idle.

The two usual groupings each fail on one of these cases. *Per-word* ECC (codeword n = word
n) breaks down when the words of a block differ in activity. *Interleaved* ECC (codeword n
= bit n of every byte) breaks down when some bit positions inside a byte switch more than
others.

ROBIN (incremental oblique interleaving) chooses which data bits feed each codeword so that
every word, every byte and every bit position contributes equally to every codeword. This
repository gives synthesizable RTL for the ROBIN grouping and the block encoder and decoder
built on it. It also has a behavioural model of the STT-MRAM data array that reproduces
write failures, and a top level that joins them into the ECC-protected data array of a 1 MB,
8-way L2 cache with 64-byte blocks.

## The grouping rule

Number the 512 bits of a block by word i (0..7), byte j in the word (0..7) and bit b in
the byte (0..7). Block bit `64*i + 8*j + b` is bit b of byte j of word i. Codeword n
(n = 0..7) takes exactly one bit from each of the 64 bytes:

    codeword n  <-  bit ((i + j + n) mod 8) of byte j of word i,   for all i, j

Three rules are combined here:

* **Interleaving across bytes.** For fixed i, j, the eight codewords take the eight different
  bits of the byte. One byte is therefore spread over all codewords, as in ordinary
  interleaving.
* **Rotation across the bytes of a word (the `+ j`).** Inside one word, codeword n takes bit n
  from byte 0, bit n+1 from byte 1, and so on. Each codeword therefore sees every bit
  position once per word. If bits 4..7 of every byte switch more often, every codeword still
  gets the same share of them.
* **Rotation across words (the `+ i`).** The starting bit moves by one from word to word. The
  same byte position in different words therefore feeds different codewords. The
  oblique pattern runs through the whole block, which gives the scheme its name.

Small excerpt (the numbers are the codeword that owns each cell):

| | byte 0: b7..b0 | byte 1: b7..b0 |
|---|---|---|
| word 0 | 7 6 5 4 3 2 1 0 | 6 5 4 3 2 1 0 7 |
| word 1 | 6 5 4 3 2 1 0 7 | 5 4 3 2 1 0 7 6 |

Inside a codeword, data bit `m = 8*i + j` comes from word i, byte j. The code corrects equally
well with any order. This is simply the order the encoder and decoder agree on.
`robin_pkg::robin_src(n, m)` gives the block bit for (codeword, data bit).
`robin_cw_of(p)` and `robin_bit_of(p)` give the inverse.

The data bits are stored in their natural order. ROBIN changes only the wiring in front of
the encoders and decoders: it adds no logic and no stored bits compared with ordinary
interleaving.

## Stored line

Each cache line holds 576 STT-MRAM cells:

| cells | contents |
|---|---|
| 511..0 | data block, natural bit order |
| 512 + 8n + 7 .. 512 + 8n | ECC_n, the 8 check bits of codeword n |

The check cells are written in the same operation as the data. They can fail in the same
way, and a failed check bit is handled like any other single error of its codeword.

## SEC-DED(72,64) code

The code is an extended Hamming code. Code positions 1..71 hold the seven Hamming check bits
at the powers of two (1, 2, 4, ..., 64). The 64 data bits fill the remaining positions 3, 5,
6, 7, 9, ... in increasing order. Check bit c (c = 0..6) is the XOR of the data bits whose
position has bit c set. Check bit 7 makes the parity of all 72 bits even.

Decoding uses the 7-bit syndrome s (XOR of the positions of all ones) and the overall parity p:

| s | p | meaning | action |
|---|---|---|---|
| 0 | 0 | no error | none |
| any ≤ 71 | 1 | one error at position s (s = 0: the parity bit) | flip it, `corrected` |
| > 71 | 1 | cannot be a single error | `uncorrectable` |
| ≠ 0 | 0 | two errors | `uncorrectable`, data passed unchanged |

Any SEC-DED(72,64) code would serve, for example a Hsiao code with fewer XOR gates. Only
`secded_encoder`, `secded_decoder` and `robin_pkg::hamming_pos` would change.

## Modules

```
robin_l2_data_array            top: write encode -> array -> read decode
 |- robin_ecc_encoder          block encoder
 |   |- robin_gather           512 bits -> 8 x 64-bit datawords (wiring)
 |   `- secded_encoder x 8
 |- stt_mram_array             behavioural STT-MRAM array with write failures
 `- robin_ecc_decoder          block decoder
     |- robin_gather
     |- secded_decoder x 8
     `- robin_scatter          8 corrected datawords -> 512 bits (wiring)
robin_pkg                      sizes, types, ROBIN index functions, Hamming positions
```

The gather, scatter, encoders and decoders are combinational.

### Top-level interface and timing

`robin_l2_data_array` (parameters `SETS = 2048`, `WAYS = 8`) takes one request per cycle and
never stalls:

* **Write.** `req_valid_i = 1` and `req_write_i = 1`, with `req_set_i`, `req_way_i` and
  `req_wdata_i`. The block and its 64 check bits are written at the clock edge.
* **Read.** `req_valid_i = 1` and `req_write_i = 0`. Two cycles later `resp_valid_o` is high
  for one cycle, together with the corrected block on `resp_rdata_o` and the per-codeword
  flags `resp_corrected_o[7:0]` and `resp_uncorrectable_o[7:0]`. Of those two cycles, one
  is the array access and one is the register behind the decoder. An assertion in the top
  checks this timing.
* **Reset.** `rst_n` is an asynchronous, active-low reset of the response registers. The
  array contents are not reset.
* **Write-failure model.** `wf_ppm_i` is the failure probability of a switching cell, in
  parts per million. `force_fail_i[575:0]` makes chosen cells fail if the write has to switch
  them. `wr_flips_o` and `wr_fails_o` count the switching cells and the failed cells of the
  last write. Tie `wf_ppm_i` and `force_fail_i` to zero for a fault-free array.

The top does not include the cache controller (tag lookup, replacement and write-back
policy). Set and way come from outside. The read latency and the request protocol are
choices made for this RTL, not values taken from a specification.

### STT-MRAM array model

`stt_mram_array` is a behavioural model and cannot be synthesized. It stores `LINES` lines
(16384 = 1 MB of 64-byte blocks) of 576 cells and starts all zero. An all-zero line is a
valid codeword. On a write, each cell whose value must change keeps its old value with
probability `wf_ppm_i / 10^6`, drawn independently for each cell, or always if its
`force_fail_i` bit is set. Cells that do not change never fail. The physical failure
probability depends on write current, pulse width and the MTJ parameters. Here it is an
input and is not computed. Read disturbance and retention failures are not modelled. For a
physical design, replace this module with the memory macro and keep the ports.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a single line
`TB_RESULT checks=N failures=M`. The reference models in `tb/tb_robin_ref_pkg.sv` are
written separately from the RTL:

* The reference encoder builds the 72-bit codeword position by position.
* The reference gather applies the grouping formula directly.

| testbench | what it checks |
|---|---|
| `tb_secded_encoder` | known vectors and 2000 random words against the reference |
| `tb_secded_decoder` | 0, 1 and 2 random errors in the 72 bits: data, `corrected`, `uncorrectable` |
| `tb_robin_gather` | one-hot sweep of all 512 bits to the right codeword; one bit per byte per codeword; random blocks |
| `tb_robin_scatter` | one-hot sweep back to block positions; gather/scatter round trip |
| `tb_robin_ecc_encoder` | 64 check bits for structured and random blocks |
| `tb_robin_ecc_decoder` | one error in every codeword at once (8 errors), a whole-byte burst, two errors in one codeword |
| `tb_stt_mram_array` | read latency, forced failures only on switching cells, 0 % / 50 % / 100 % failure probability |
| `tb_robin_l2_data_array` | full 1 MB configuration end to end; see below |
| `tb_robin_write_patterns` | how evenly ROBIN spreads transitions, compared with per-word and interleaved grouping |

`tb_robin_l2_data_array` runs the top at its default size. It counts each of the following
situations and fails if any of them never happens:

* clean writes and reads with the 2-cycle latency;
* a rewrite with identical data, which switches no cell;
* one forced failure in every codeword of a block (8 bad cells, all corrected);
* a failed whole byte, which ROBIN spreads over several codewords so it is still corrected;
* two failures in one codeword (flagged uncorrectable for that codeword only);
* 400 writes with random failures at 0.2 % per switching cell, where every read must either
  return the written block or flag an uncorrectable codeword.

`tb_robin_write_patterns` generates synthetic transition profiles (the XOR of old and new
data). They are modelled on the profiles the technique was designed for:

* double-precision data whose exponent bits switch most;
* narrow integers;
* doubles with only the first few words valid;
* an irregular profile.

For each profile it measures the largest per-codeword transition count divided by the mean
(1.0 is perfectly even), averaged over 3000 writes. A typical run:

| profile | per-word | interleaved | ROBIN |
|---|---|---|---|
| fp_dense | 1.39 | 1.46 | 1.39 |
| int_narrow | 1.50 | 1.82 | 1.49 |
| fp_partial | 3.16 | 1.67 | 1.64 |
| irregular | 1.34 | 1.40 | 1.34 |

ROBIN matches the better conventional grouping on every profile. Each conventional grouping
fails badly on one profile: per-word on partly valid blocks, interleaved on narrow integers.
The remaining spread above 1.0 comes from the randomness of independent bit flips, and no
grouping can remove it. The switching probabilities are this testbench's own model, not
measured program data.

## Simulating

Any testbench can be built with plain Verilator 5 from the repository root. Name the two
packages first; `-y` lets Verilator find every other module by its file name:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/robin_pkg.sv tb/tb_robin_ref_pkg.sv tb/tb_robin_l2_data_array.sv \
    --top-module tb_robin_l2_data_array
./obj_dir/Vtb_robin_l2_data_array +verilator+rand+reset+2
```

The full-size top test builds in about 30 s and runs in about 1 s. Most of the build time
goes on the fully unrolled encoder and decoder.

## How far this follows the source method, and what is this design's own

Taken from the method:

* 512-bit blocks of eight 64-bit words;
* eight SEC-DED(72,64) codewords per block;
* the grouping rule, bit (i + j + n) mod 8 of byte j of word i;
* write failures that occur only on switching cells, independently of neighbouring cells;
* the L2 organisation: 1 MB, 8-way, 64-byte blocks, STT-MRAM.

Choices made here where the method is silent:

* the SEC-DED construction (extended Hamming) and its bit order;
* the order of bits inside a codeword;
* the placement of the check bits after the data;
* the per-codeword status flags;
* the request/response protocol and the 2-cycle read latency;
* the zero initial contents and the failure-probability input of the array model.

Not included:

* the L2 cache controller and tags, the L1 cache and the processor used to evaluate the
  method;
* the per-word and interleaved configurations, except as reference groupings inside
  `tb_robin_write_patterns`;
* read disturbance and retention failures;
* what the cache does with an uncorrectable block. The decoder only reports it.

## Changing the design

`robin_pkg` fixes the geometry at 8 words × 8 bytes × 8 bits with 8 codewords. The grouping
formula uses `mod 8` on all three indices, so it relies on these four numbers being equal.
Other geometries need a generalised rule in `robin_src`/`robin_cw_of`/`robin_bit_of`. The
gather and scatter modules and the testbench properties (one bit per byte per codeword)
follow from those functions. The array size follows the top's `SETS` and `WAYS`
parameters.
