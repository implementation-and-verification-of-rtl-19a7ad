# Single-cycle ECC for FPGA block RAM: a (26,20) Hsiao code and a (26,16) BCH code

Radiation flips bits in the embedded block RAMs of an FPGA. Most such events upset one bit of a
word, and a few upset two. This design protects a 26-bit memory word in one of two ways.

* **Shortened Hamming (Hsiao) code, (26,20).** It stores 20 data bits and 6 parity bits. It
  corrects any single upset and detects any double upset (SECDED).
* **Shortened BCH code, (26,16).** It stores 16 data bits and 10 parity bits. It corrects any
  single or double upset.

Both codes use the same word width, so they cost the same memory and can be compared directly.
Both decoders are **combinational**: syndrome, error lookup and correction all settle in the cycle
the word comes out of the RAM. A textbook BCH decoder instead takes several cycles (Peterson or
Berlekamp iterations plus a Chien search). Here the BCH decoder does what the Hamming decoder
does: it looks the syndrome up among every correctable error pattern. For the BCH code that
means 351 patterns (26 single + 325 double) instead of 26. That lookup is most of the BCH
decoder's area.

Around the two codecs, the design adds an on-chip **test sequencer** of the kind used in
heavy-ion tests. It writes a checkerboard pattern, leaves the memory exposed for a fixed time
(120 s at 10 MHz by default), reads every word back through the decoder and reports each word
that shows an error.

## Data path

```
          write                                              read
data_in ──► encoder ──► {data, parity} ──► RAM ──► rd_data ──► syndrome ──► error pattern ──► err_loc
                                                      │            │                          │
                                                      │            └──► OR ──► err_flag       │
                                                      └──────────────────────► XOR ◄──────────┘
                                                                                │
                                                                         corrected_data
```

| Code    | Codeword bit order          | Data bit Di at | Parity bit Pj at |
|---------|-----------------------------|----------------|------------------|
| Hamming | `{D19..D0, P5..P0}` (26 b)  | bit 6+i        | bit j            |
| BCH     | `{D15..D0, P9..P0}` (26 b)  | bit 10+i       | bit j            |

`corrected_data` is the whole corrected 26-bit codeword. `data_out` holds its data bits.
`err_loc` has a one at each bit the decoder flipped.

## The Hamming (Hsiao) code

Each codeword bit has a 6-bit syndrome column:

* parity bit Pj has the one-hot column `1<<j`;
* the 20 data bits have the 20 columns of weight 3 (`ecc_pkg::HAM_DATA_COL`).

All columns have odd weight. The syndrome is the XOR of the columns of the bits that are set.

| Upsets | Syndrome                                   | Decoder output                                                           |
|--------|--------------------------------------------|--------------------------------------------------------------------------|
| 1      | the column of the upset bit (odd weight)   | `err_loc` one-hot, word corrected, `err_flag` = `corrected_flag` = 1     |
| 2      | XOR of two columns: even weight, never zero | `err_flag` = 1, `corrected_flag` = 0, `err_loc` = 0, word passed through |

Parity bit Pk is the XOR of the data bits whose column has a one in row k. For example:

`P0 = D0^D1^...^D9`
`P5 = D19^D18^D17^D15^D14^D12^D9^D8^D6^D3`

`hamming_encoder` writes all six equations out.

This design raises `corrected_flag` only when the syndrome equals one of the 26 columns. The
simpler rule "odd syndrome weight means correctable" would also flag the six weight-5
syndromes. Those cannot come from one upset; they come from three or more. Such words are
reported as detected (`err_flag` = 1, `corrected_flag` = 0).

Checkerboard example: data `0x55555` encodes to codeword `0x155557f`. Upsetting bit 0 gives
`0x155557e`, which is corrected with `err_loc = 0x0000001`. Upsetting bits 0 and 1 gives
`0x155557c`, which is only flagged.

## The BCH code

The code is the (31,21) binary BCH code shortened by five data bits. Its generator is

g(X) = (X^5+X^2+1)(X^5+X^4+X^3+X^2+1) = X^10+X^9+X^8+X^6+X^5+X^3+1.

Its minimum distance is 5.

* **Encoding** is systematic: parity = D(X)·X^10 mod g(X). `bch_encoder` writes this out as ten
  XOR trees. For example, `P0 = D0^D1^D3^D5^D7^D8^D9^D10^D13`.
* **Syndrome.** The syndrome of a received word R is R(X) mod g(X). It is computed as the parity
  recomputed from the received data bits XOR the received parity bits (`bch_syndrome`). In
  matrix terms, the column of codeword bit p is h(p) = X^p mod g(X), and H = [P I].
* **Error pattern** (`bch_error_pattern`). The distance is 5, so the 351 syndromes of all single
  and double error patterns are distinct and nonzero.
  * Syndrome h(p) means bit p is wrong.
  * Syndrome h(p)^h(q) means bits p and q are wrong.
  * The module has one 10-bit comparator per pattern. Its constants are computed at elaboration
    by `ecc_pkg::bch_cols()`: each column is the previous one times X, reduced modulo g(X). There
    is no stored table. At most one comparator can match.
* **Correction and flag.** `corrected_data = rd_data ^ err_loc`, and `err_flag` is the OR of the
  syndrome bits.

Three or more upsets can give a syndrome outside the 351: the decoder then raises `err_flag` and
passes the word through. They can also give a syndrome inside the 351: the decoder then
miscorrects into another codeword, whose data always differs from what was written. The test
sequencer reports any word whose corrected data differs from the pattern as a bad word; upsets
confined to the parity bits that are passed through leave the data intact.

Checkerboard example: data `0x5555` encodes to `0x1555535`. `0x1555534` (one upset) and
`0x1555536` (two upsets, `err_loc = 0x0000003`) both correct back to `0x1555535`.

The BCH decoder has no corrected-flag output of its own. In the top, the BCH lane's sequencer
counts a word as corrected when `err_loc` is nonzero.

## Memory (`ecc_bram`)

* Simple dual-port array: synchronous write, and a synchronous read with one cycle of latency.
  `rd_data` holds while `rd_en` is low, and the contents are not reset.
* The default depth of 7424 words is an estimate. The target flash FPGA has 88 RAM blocks of
  2304 bits. Taken as 256×9 each, three blocks make a 26-bit word, giving 29 groups of 256 words.
* The `inj_*` port XORs a mask into one stored word at a clock edge, to model a particle strike
  in simulation. A write in the same cycle wins. A real RAM block has no such port; remove it, or
  tie it off, for an FPGA build.

## Test sequencer (`see_tester`)

The sequencer runs one pass after another while `run` is high:

1. **Write.** Store the checkerboard (`…0101`, bit 0 = 1) at every address, in order: DEPTH
   cycles.
2. **Expose.** Wait WAIT_CYCLES cycles. The default of 1.2·10^9 cycles is 120 s at 10 MHz.
3. **Read.** Read every address in order: DEPTH cycles, plus one drain cycle.
4. **Repeat or stop.** If `run` is still high, start the next pass with a fresh write (the
   rewrite clears all upsets). Otherwise go idle.

**What is reported.** A word is reported when the decoder raises `err_flag`, or when the
corrected data is not the pattern (`rpt_mismatch`, an upset the code could not handle). The
report registers hold the following, and `rpt_valid` pulses two cycles after the word's read was
issued:

* the address (`err_addr`)
* the raw codeword
* `err_loc`
* the corrected data
* both flags
* the pass number
* a 48-bit cycle time stamp

**Per-pass counters.** `cnt_flagged`, `cnt_corrected` and `cnt_bad` count over one pass. They are
final when `pass_done` pulses and clear when the next write begins.

**What is outside the design.** An external host decides when enough errors have been seen (it
drops `run`) and records the reports.

## Top (`ecc_see_top`)

The top has two independent lanes: a Hamming lane and a BCH lane. Each lane is encoder, RAM,
decoder and sequencer, and the two lanes share `clk`, `rst_n` and `run`. The ports are
prefixed `ham_` and `bch_`. Upset injection is per lane.

In the experiments that motivated the design, each code ran on its own device. Putting both on
one top is this design's choice: one simulation then exposes them to the same pattern and
timing.

## Timing summary

| Path                                   | Latency                               |
|----------------------------------------|---------------------------------------|
| encoder, decoders                      | combinational                         |
| RAM read                               | 1 cycle                               |
| sequencer report after read issue      | 2 cycles                              |
| one pass                               | 2·DEPTH + WAIT_CYCLES + 1 cycles      |

The BCH decoder's critical path is the syndrome XOR trees, then a 10-bit compare, then an OR
over up to 26 matches, then the correcting XOR. This path is the main cost of the double-error
correction.

## Files

| File | Contents |
|------|----------|
| `rtl/ecc_pkg.sv` | code sizes, Hamming columns, BCH generator and column function, types |
| `rtl/hamming_encoder.sv`, `rtl/hamming_decoder.sv` | (26,20) Hsiao codec |
| `rtl/bch_encoder.sv`, `rtl/bch_syndrome.sv`, `rtl/bch_error_pattern.sv`, `rtl/bch_decoder.sv` | (26,16) BCH codec |
| `rtl/ecc_bram.sv` | codeword RAM with upset injection |
| `rtl/see_tester.sv` | write / expose / read / report sequencer |
| `rtl/ecc_see_top.sv` | two-lane top |
| `tb/*_tb.sv` | one self-checking testbench per module; `tb/bch_ref_pkg.sv` is a long-division BCH reference; `tb/ecc_see_top_bench.sv` is the shared end-to-end bench |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ecc_pkg.sv tb/bch_ref_pkg.sv \
    tb/bch_decoder_tb.sv --top-module bch_decoder_tb && ./obj_dir/Vbch_decoder_tb
```

Verilator finds the other modules through `-I` (each module is in a file of its own name).

What the testbenches cover:

* **Codecs.** The BCH encoder and error-pattern tests are exhaustive: all 65536 data words, and
  all 1024 syndromes. The decoder tests apply every single and double upset to many random
  codewords, plus the checkerboard values above.
* **`ecc_see_top_tb`.** Runs the two-lane top at 64 words and a 200-cycle exposure, for two
  passes. It injects single, double and triple upsets into both lanes during the first exposure
  and checks every report against the injected masks. It then checks that the second pass, after
  the rewrite, reports nothing, and that the top goes idle.
* **`ecc_see_top_fulldepth_tb`.** Runs the same checks with the full 7424-word memories and a
  2·10^6-cycle exposure.
* **`ecc_see_top_beam_tb`.** Runs a beam-test-like pass at full depth. It injects 600 random
  upset events per lane: mostly single bits, and about one in 26 an adjacent pair, close to the
  single-to-double ratio measured on unprotected RAM. It checks that the BCH lane ends with no bad
  word, and that the Hamming lane ends with bad data exactly where a pair hit data bits.

A pass with the full 1.2·10^9-cycle exposure simulates at roughly 1.1 to 1.3 M cycles/s, about 15 to 18
minutes. No testbench runs it. The exposure length only sets the 32-bit wait counter's start
value.

## Where this departs from, or adds to, the source description

* **Source of the BCH parity equations.** The parity equations and the test values come from the
  generator polynomial, the encoder schematic and the published simulation values, which all
  agree. The printed generator matrices of the source are garbled: most rows have the wrong
  length. They were not used.
* **Choices the source does not make.** The RAM depth, its port style and latency, the upset
  injection port, and everything in the sequencer beyond the write / wait / read / report flow.
  That includes the report format, the counters, the time stamp and the `run` handshake.
* **Behaviour left unspecified by the source.** `corrected_flag` in the Hamming decoder (see
  above), and the BCH lane's corrected count.
* **Not built.** The unprotected reference memory, the external test host and the FPGA device
  itself.
