# Bit-parallel deterministic stochastic multiplier

In stochastic computing a number v in [0, 1] is a bit stream of length N
holding N·v ones. Multiplying two such numbers takes one AND gate per bit,
because the fraction of positions where both streams hold a '1' approximates
the product of the two fractions. That holds only if the two streams are
uncorrelated in the right way. Classic stochastic multipliers get there with
long pseudo-random streams processed one bit per clock. That is slow and
still noisy.

This multiplier produces both streams in full, in parallel and
deterministically, from two B-bit binary operands. The streams are N = 2^B
bits long, the shortest length that represents a B-bit value exactly. The
placement of the ones is fixed by wiring, not by random generators. One
stream has its ones packed at one end. The other has its ones spread over
the whole length in a fixed pattern, so a packed prefix of any length sees
roughly the right share of them. A product is one pass through a few levels
of gates: there is no clock, no counter and no stream generator.

The default configuration is B = 8: 8-bit operands and 256-bit streams.

## Number format

Operands `xb` and `yb` are unsigned B-bit integers read as X_b/N and Y_b/N.
Stream bits are numbered 1..N, and bit n of a SystemVerilog vector is stream
position n+1. Position N is the leading (most significant) end and position 1
the trailing end. The result `ou` is a stream O_u; its count of ones divided
by N approximates (X_b/N)·(Y_b/N). The multiplier does not convert O_u back
to binary. A downstream population count, or an accumulator that adds streams
(as in a matrix-multiply array), would do that.

## Structure

```
 xb[B-1:0] ──► tcu_decoder (W=B)   ──────────── X_u[N] ───┐
                                                          ▼
 yb[B-2:0] ──► tcu_decoder (W=B-1) ── y_i[N/2] ─► bpc_encoder ── Y_u[N] ─► unary_and_array ─► ou[N]
 yb[B-1]   ─────────────────────────── msb ─────►
```

| file | module | role |
|---|---|---|
| `rtl/stoch_mul_pkg.sv` | `stoch_mul_pkg` | default B and the width functions N = 2^B, N/2 |
| `rtl/tcu_decoder.sv` | `tcu_decoder` | binary to thermometer ("transition-coded unary") |
| `rtl/bpc_encoder.sv` | `bpc_encoder` | places the ones of Y_u (bit-position correlation encoder) |
| `rtl/unary_and_array.sv` | `unary_and_array` | N AND gates, O_u = X_u & Y_u |
| `rtl/stochastic_multiplier.sv` | `stochastic_multiplier` | top level, parameter `B` (default 8) |

### Thermometer decoders

`tcu_decoder` turns a W-bit value v into 2^W bits, where bit j is '1' exactly
when j < v. The v ones therefore sit at the trailing end, and the single 0→1
transition marks the value. The X operand goes through a B-bit decoder and
becomes X_u directly. For example, with B = 3, X_b = 4 gives `00001111`. The
low B-1 bits of Y go through a (B-1)-bit decoder. Its N/2 outputs y_i^1..y_i^(N/2)
are a thermometer code of the low part of Y, called lo below. Its top output
is always '0' and is not used.

### Bit-position correlation encoder (the part that matters)

The encoder builds Y_u from the Y MSB (`msb`) and y_i. It splits the stream
into N/2 pairs of adjacent positions, counted from the leading end:

| positions | value |
|---|---|
| y_u^N | `msb` |
| y_u^(N-1) | 0 |
| y_u^(N-2k), for k = 1 .. N/2-1 | `msb` OR y_i^k |
| y_u^(N-2k-1), for k = 1 .. N/2-1 | `msb` AND y_i^k |

This gives exactly Y_b ones in both cases:

* If `msb` = 1, every upper bit of a pair is '1', which gives N/2 ones. The
  lower bits of the first `lo` pairs add `lo` more.
* If `msb` = 0, only the upper bits of the first `lo` pairs are '1'.

Below are the three B = 3 examples used as reference vectors throughout the
testbenches. Streams are written from position 8 down to position 1.

| X_b | Y_b | X_u | Y_u | O_u | ones(O_u)/8 | exact X·Y/64 |
|---|---|---|---|---|---|---|
| 4 | 6 | 00001111 | 10111110 | 00001110 | 3/8 | 0.375 |
| 5 | 3 | 00011111 | 00101010 | 00001010 | 2/8 | 0.234 |
| 3 | 4 | 00000111 | 10101010 | 00000010 | 1/8 | 0.1875 |

Why this works: if Y ≥ N/2, every other position of Y_u is '1' along the whole
stream. Any trailing prefix of X_u then picks up about half its length, plus
a few more from the extra ones. So the result tracks X·Y/N closely. If Y < N/2,
the ones of Y_u are spaced two apart but packed towards the leading end, where
X_u has its zeros. A short X then misses them, and this case carries the
largest errors.

Over all 65,536 pairs at B = 8, the mean absolute error of the result is
0.0403 (in units of full scale) and the worst case is 0.124. For example,
X = 128, Y = 64 yields 1/256 where 32/256 is exact. That mean is the 0.04
reported for this design. The reported figures for comparison: a random-stream AND multiplier
(Gaines) has a mean error of 0.08, and a multiplier using deterministic
correlation adjustment (uMUL) has 0.06. The error also depends less on
|X − Y| than in those designs.

The multiplier is not symmetric: swapping X and Y changes the result. X must
go to the packed side.

### AND array

`unary_and_array` is one AND gate per position: o_u^n = x_u^n · y_u^n.

## Timing and interface

`stochastic_multiplier #(B)` has inputs `xb[B-1:0]` and `yb[B-1:0]`, and
output `ou[2^B-1:0]`. It is purely combinational, with no clock, reset or
handshake. Logic depth is one comparator per decoder output, then one OR/AND
level, then one AND level. A product is ready one propagation delay after
the operands change. The reported latency for B = 8 is 0.17 ns,
against 640 ns for the bit-serial designs above. If the multiplier sits in a
clocked datapath, register `xb`/`yb` and `ou` outside it.

Size grows as 2^B. At B = 8 the top synthesizes to about 1,300 word-level
cells: 127 + 255 comparators in the decoders, 127 OR and 127 AND gates in the
encoder, and 256 AND gates in the array.

## What is taken from the description and what is not

Taken from the description:

* the block structure and signal names;
* the thermometer code with ones at the trailing end;
* the bitwise AND;
* the use of the Y MSB, a constant '0', and the OR/AND pairs in the encoder.

Derived here: which gate drives which Y_u position. The schematic does not
make this unambiguous, so the assignment in the table above was chosen to
reproduce the three worked examples exactly. It also reproduces the published
mean error of 0.04 at B = 8, which is strong evidence that it matches.

This design's own choices:

* The decoders use the simplest circuit for their function: a comparison per
  output bit.
* Fanout buffers shown on the `msb` and y_i nets are plain wires; buffering is
  left to synthesis.
* The block has no registers and no reset.
* There is no stream-to-binary conversion.
* B must be at least 2.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.

* `tb_tcu_decoder`: all inputs of the 8-bit and 7-bit decoders against
  (1<<v)−1, plus the three X streams above at W = 3.
* `tb_bpc_encoder`: the three Y streams above at B = 3. At B = 8, all 256
  operands are checked against a pair-by-pair reference, and each Y_u is
  checked to hold exactly Y_b ones.
* `tb_unary_and_array`: the three example products, then random 256-bit
  streams checked bit by bit.
* `tb_stochastic_multiplier` runs the default B = 8 top end to end:
  * all 65,536 operand pairs against an independent reference stream, with a
    sampled check of the count of ones;
  * the mean error must fall in 0.035..0.045 and the worst case below 1/8;
  * it counts that MSB-clear and MSB-set operands, exact and inexact products,
    zero operands and full-scale operands all occurred;
  * no parameter of the top is overridden.

  It runs in well under a second.
* `tb_error_vs_difference` runs the default top over all pairs. It reports
  the mean and worst error in ten bins of |X − Y|/N. The bin means stay
  between 0.037 and 0.044 up to a difference of 0.7, then fall towards 0.009.
  The worst error in every bin stays below 1/8.
* `tb_table1_examples` runs the top at B = 3 through the three examples
  above and checks X_u, Y_u and O_u inside it. It also checks every other
  3-bit pair.

To simulate one with plain Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/stoch_mul_pkg.sv tb/tb_stochastic_multiplier.sv \
    --top-module tb_stochastic_multiplier
./obj_dir/Vtb_stochastic_multiplier
```

Set `B` on `stochastic_multiplier` to change the operand width. Every width
follows from it.
