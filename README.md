# Staircase-code FEC for 100 Gb/s OTN: encoder and sliding-window decoder in SystemVerilog

A staircase code is a forward-error-correction code for streaming data that
behaves like a product code stretched out without end. The data is cut into
square-ish blocks of bits B_1, B_2, ..., and every row of the wide matrix
[B_{i-1}^T  B_i] must be a codeword of a short algebraic "component" code.
Each bit therefore sits in two component codewords (a row of its own block
and a row of the next block's matrix), just as a bit of a product code sits in
a row and a column. Drawn with the transposes, consecutive blocks form a
staircase, hence the name. Decoding works on a window of the last few blocks
and only ever handles component syndromes, which keeps the amount of data
moving inside the decoder small: that is the property that makes the code
attractive at 100 Gb/s.

This RTL implements the G.709-compatible member of the family described by
Smith, Farhood, Hunt, Kschischang and Lodge ("Staircase Codes: FEC for
100 Gb/s OTN"): rate 239/255, the same as the RS(255,239) code of the OTN
frame, so it drops into the existing G.709 framing.

## The code

* **Blocks.** Each block has NR = 512 rows and NC = 510 columns. Two
  G.709 frames (2 x 130 560 bits) fill exactly one block (512 x 510).
  Columns 0..477 carry information, columns 478..509 parity.
* **Component codewords.** Row j of block B_i closes one codeword of length
  1022: its first 512 bits are row j of B^_{i-1}^T, which is the transpose of
  the previous block with two all-zero rows put on top (so for j >= 2 it is
  column j-2 of B_{i-1}, and for j < 2 it is all zero); its last 510 bits are
  row j of B_i itself. The block before the first one, B_0, is all zeros.
* **Component code.** The binary code generated by
  `g(x) = (x^10+x^3+1)(x^10+x^3+x^2+x+1)(x^10+x^8+x^3+x^2+1)(x^2+1)`:
  the triple-error-correcting BCH code of length 1023 with two extra parity
  bits from the (x^2+1) factor, shortened to 1022 bits (990 information,
  32 parity). Minimum distance 8: it corrects 3 errors and detects 4.
* **Bit order.** Position p of a codeword (p = 0 first) is the coefficient of
  x^(1021-p). The parity bits are the 32 lowest degrees, i.e. the rightmost
  columns of B_i; the parity bit of degree d sits in column 509-d.
* **Rate.** Each block adds 32 parity columns to 478 information columns:
  478/510 = 239/255.

## Syndromes

All of the decoder works on syndromes, never on whole codewords. The field is
GF(2^10) built on x^10+x^3+1 with root alpha; the second and third factors of
g(x) are the minimal polynomials of alpha^3 and alpha^5. So a word c(x) is a
codeword exactly when c(alpha) = c(alpha^3) = c(alpha^5) = 0 and it has even
weight in both its even-degree and its odd-degree positions (that is what
divisibility by (x+1)^2 = x^2+1 means). The 32-bit syndrome used everywhere
is therefore

    { S1 = r(alpha), S3 = r(alpha^3), S5 = r(alpha^5), odd-degree parity, even-degree parity }

and the syndrome contribution ("mask") of a bit of degree d is
`{alpha^d, alpha^3d, alpha^5d, d odd, d even}`. A syndrome is the XOR of the
masks of the set bits; flipping a bit XORs its mask in again. All mask tables
are computed at elaboration from these definitions (`sc_pkg`).

The encoder uses the other classical form, x^d mod g(x), because it needs the
parity bits themselves.

## Encoder (`sc_encoder`)

One row per clock cycle. The parity of a row is the XOR of `x^d mod g(x)` over
its set information bits, plus the same over the 512 bits of the first half
of the codeword. That first half is a column of the previous block, which the
encoder has already produced row by row. So while row r of B_{i-1} goes out,
each of its set bits in column c adds the single mask `x^(1021-r) mod g(x)` to
a partial parity kept for row c+2 of B_i. When row j of B_i arrives, the
encoder XORs that partial parity with a masking tree over the row's 478
information bits and emits the row with the 32 parity bits appended. Two
banks of 512 partial parities alternate between the block being coded and the
next one. Output is registered: a row appears one cycle after it is accepted.

## Decoder

### Window and storage

The decoder keeps the last L = 7 received blocks. The component codewords that
end (have their parity) in those blocks are decoded; the codewords ending in
the oldest block also reach back into a block already delivered, whose bits
are treated as final. Storage:

* **Data RAM** (`sc_data_ram`): 7 x 512 words of 510 bits, the received hard
  decisions, corrected in place. A row port reads a word and writes its
  replacement in the same cycle; a bit port inverts one bit.
* **Syndrome bank** (`sc_syndrome_unit`): a 32-bit syndrome and a "changed"
  flag for every codeword ending in the 7 window blocks, plus one more slot
  of 512 for the codewords that will end in the next block: their first half
  is already in the window, so their half-syndromes are collected as it
  arrives. 8 x 512 x 32 bits of flip-flops in all.

Slots are used as rings: the block leaving the window frees its data rows
for the arriving block, and its syndrome slot becomes the new "next block"
slot.

### Loading a block

A block is taken one row per cycle (512 cycles). For row r:

* the row's 510 bits are the second half of codeword (this block, r): a
  masking tree XORs their masks and adds the result to that syndrome;
* bit c of the row is bit r of codeword (next block, c+2), and all of these
  use the same mask, the one of position r, read from a table indexed by r.
  It is added to each codeword whose bit is set.

In the same cycle, row r of the oldest block is read out of the RAM slot that
the new row overwrites; it is the decoded output.

### Iterative decoding

After a load, the decoder runs up to ITER = 3 iterations. Each one visits the
window's blocks from newest to oldest and, in each, the 512 codewords that end
there. A codeword is decoded only if its syndrome has changed since its last
decoding. A successful decoding

1. flips its (at most three) bits in the data RAM, one per cycle;
2. for each flipped bit, adds that bit's mask to the *other* codeword holding
   it: the codeword ending in the next block when the bit lies in this block,
   the codeword ending in the previous block when it lies there;
3. clears its own syndrome.

A decoding is rejected, and counted as a failure, when the component decoder
gives up or when a bit to flip lies outside the window: in the block already
delivered, in the all-zero B_0, or in the all-zero first half of the
codewords of rows 0 and 1 (the padding rows of B^_{i-1}^T). The decode phase stops early after an iteration in which no
codeword had changed. Codewords that keep failing are tried again only after
another correction touches them.

Newest-to-oldest matters: decoding the codewords that end in block k changes
the ones ending in block k+1, so the decoder goes back to the newest block at
every iteration, and every block goes through seven window positions before it
leaves.

### Component decoder (`bch3_decoder`)

Given {S1, S3, S5} it computes D3 = S1^3 + S3 and D5 = S1^5 + S5 and picks
the number v of errors:

| v | condition                          | error locator                         |
|---|------------------------------------|---------------------------------------|
| 0 | syndrome zero                      | none                                  |
| 1 | S1 != 0, D3 = D5 = 0               | x + S1                                |
| 2 | S1 != 0, D3 != 0, S1 D5 = S3 D3    | x^2 + S1 x + D3/S1                    |
| 3 | D3 != 0, not v = 2                 | x^3 + S1 x^2 + b x + S1 b + D3, b = (S1^2 S3 + S5)/D3 |

Its roots X are alpha^d, d being the degree of a bit in error. They are
found by substitutions and table look-ups, with no search over positions:

* v = 2: x = S1 y turns the locator into y^2 + y + c with c = D3/S1^3;
  a 1024-entry table gives one root y0, the other is y0 + 1.
* v = 3: x = y + S1 gives y^3 + (D5/D3) y + D3. If D5 = 0 the roots are the
  three cube roots of D3 (a table gives two, the third is their sum).
  Otherwise y = sqrt(D5/D3) z gives z^3 + z + k with k = sqrt(D3^5/D5^3);
  a table gives two roots z1, z2, the third is z1 + z2.
* A log table turns each root into its degree.

The result is accepted only if the roots exist and are distinct, every degree
is below 1022, and the syndrome rebuilt from the found positions equals the
input, including the two parity bits. That last check is what makes the
(x^2+1) factor useful: any pattern of 4 errors is always rejected, never
miscorrected. The decoder is combinational with one output register.
Inversions are computed as a^1022 and square roots as a^512.

## Timing and throughput

| phase                      | cycles per block                                   |
|----------------------------|----------------------------------------------------|
| clear the next-block slot  | 1                                                  |
| load (input and output)    | 512, one row per cycle                             |
| each decode iteration      | 7 x 512 visits, + (2 + v) for each codeword decoded |

There is one component decoder, and one corrected bit is applied per cycle.
The decoder is therefore a faithful but serial rendering of the algorithm. At
least 4 097 cycles per 261 120-bit block means at most 64 bits per cycle, or
about 25 Gb/s at 400 MHz, against the 267 bits per cycle that 100 Gb/s needs
at that clock. Reaching line rate means decoding several codewords per cycle.
This design does not attempt that, because the source publication does not
describe how its hardware decoder was parallelised.

In the codec top (`sc_top`) the encoder is stalled while the decoder
decodes, so the pair runs at the decoder's pace.

## Module map and interfaces

| module             | role |
|--------------------|------|
| `sc_pkg`           | constants, GF(2^10) arithmetic, g(x) |
| `sc_encoder`       | staircase encoder, one row per cycle, valid/ready both sides |
| `sc_syndrome_unit` | masking tree, position-mask table, syndrome bank with changed flags |
| `bch3_decoder`     | syndrome-domain t = 3 decoder with root tables |
| `sc_data_ram`      | window data memory |
| `sc_decoder`       | window controller: load, iterate, correct, output |
| `sc_top`           | encoder -> XOR with `chan_err` -> decoder |

`sc_top` ports: `in_valid/in_ready/in_info[477:0]` take information rows;
`tx_fire/tx_row` show the coded row crossing the line, onto which
`chan_err[509:0]` is XORed in that cycle; `out_valid/out_row/out_last` give
the decoded rows, L blocks later, with no back-pressure; the `ev_*` pulses
mark corrections (with their size), failures, corrections in the older block,
and the end of a decode phase, whether early or at the iteration limit.
Reset is asynchronous, active low. After reset the decoder holds an all-zero
window. The first decoded row comes out while block 8 is loading. To flush
the last six blocks, send further encoded blocks, for example with zero
information.

Parameters: `NR` (512), `NC` (510), `L` (7), `ITER` (3). Any NR = NC + 2 with
NC > 32 gives a valid, more heavily shortened code (the testbenches use
64 x 62). `L` and `ITER` are free.

## What follows the source and what is this design's choice

From the source: the code (block size, padding rows, generator polynomial,
shortening, B_0 = 0), the syndrome-domain decoding with masks, the masking
tree and the look-up of the column mask, decoding only changed syndromes,
the newest-to-oldest sliding-window schedule with L = 7, and the
case analysis and table-lookup root finding of the component decoder.

This design's own choices, where the source is silent:

* the syndrome format {S1, S3, S5, parities} and the bit order of a codeword;
* one row per cycle at the encoder and at the decoder input;
* the extra syndrome slot for the next block;
* one component decoder, serial corrections, separate load and decode phases;
* ITER = 3 and stopping early after an iteration with no change;
* rejecting corrections outside the window;
* accepting a component decoding only after the rebuilt syndrome matches;
* one stored root in the quadratic table instead of a pair;
* field inversion by exponentiation;
* valid/ready handshakes and the reset behaviour.

Not built: the G.709 frame mapper, which the source only mentions, and the
channel-error generator used to measure the code, which the top replaces by
the `chan_err` input.

## Verification

Each testbench is self-checking and ends with a `TB_RESULT checks=.. failures=..`
line. The reference arithmetic (`tb/tb_sc_ref.sv`) is written independently
of the RTL: long division by g(x) and Horner evaluation of the syndromes.

| testbench              | what it shows |
|------------------------|---------------|
| `tb_sc_encoder`        | every row codeword of 4 blocks divisible by g(x), zero syndrome, info passes, 1-cycle latency, under random back-pressure (64 x 62) |
| `tb_bch3_decoder`      | 3 000 random patterns at full length 1022: weights 0-3 decoded exactly, weight 4 always rejected, 1-cycle latency |
| `tb_sc_syndrome_unit`  | stored row and column syndromes equal the reference; done, update and clear ports |
| `tb_sc_data_ram`       | read-before-write and bit flips against a model |
| `tb_sc_decoder`        | 14 blocks at about 1 % bit errors plus a 3 x 3 burst and a 4-error row, all decoded; loads take 512 consecutive cycles; every mechanism seen (64 x 62, L = 4) |
| `tb_sc_top`            | the same end to end through the encoder (64 x 62, L = 4) |
| `tb_sc_stall`          | a minimal 4 x 4 stall pattern (16 errors, every codeword involved holds 4) passes through uncorrected while nearby single errors are fixed; this is the error-floor mechanism |
| `tb_sc_top_full`       | all defaults (512 x 510, L = 7, ITER = 3): 9 blocks at 4e-3 bit errors plus a burst, the two decoded blocks exact, every mechanism seen |

None of these measure the code's error rate at 1e-15. That took the
authors an FPGA and is far beyond simulation.

To run one with plain Verilator, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
      rtl/sc_pkg.sv tb/tb_sc_ref.sv tb/tb_sc_top_full.sv --top-module tb_sc_top_full
    ./obj_dir/Vtb_sc_top_full

Replace the last testbench file and top name for the others.
The full-size run finishes in about a second.
