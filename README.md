# SOLE: Softmax and LayerNorm units with 4-bit intermediate storage

Softmax and LayerNorm are cheap in arithmetic but awkward in hardware. Both are two-pass:
a whole vector has to be seen before any output can be produced, so every element must be
buffered between a statistics pass and a normalisation pass. In a quantised transformer the
matrix multiplies run in INT8, and these layers then become memory-bound. The SOLE scheme
(E2Softmax and AILayerNorm) makes the buffered data and the arithmetic on it narrow:

* **Softmax** keeps each exponential only as a 4-bit power of two: exp(x - max) ~ 2^-k. The
  exponent k is computed with shifts and adds. The final division by the sum is done in the
  log domain: a leading-one detector, a 1-bit mantissa, a two-way mux and a shifter.
* **LayerNorm** computes the sum of squares from 4-bit compressed inputs with a 16-entry
  square table. The per-channel power-of-two factors (PTF) of the input quantiser are
  applied as shifts *after* squaring, so no 12-bit multiplier is needed.

This repository holds synthesizable SystemVerilog for both units, a top level with one of
each, and self-checking testbenches. The algorithms, the block structure and the published
configuration (32 lanes, vectors up to 1024 elements) follow the SOLE publication. The
interfaces, number formats, table sizes and pipeline control are this implementation's own
choices, because the publication does not give them. The section "Departures and choices"
lists them.

## Top level

`sole_top` contains one `e2softmax_unit` and one `ailayernorm_unit`. They share only the
clock and the synchronous active-low reset `rst_n`. In the published system both units sit
next to a shared memory under a controller. Neither of those is described in enough detail
to build, so each unit's streams are ports of the top, with prefix `sm_` (Softmax) or `ln_`
(LayerNorm).

All streams use valid/ready handshakes. A beat is one **slice** of `LANES = 32` elements,
sent with a lane mask (`*_mask`) and a `*_last` flag on the last slice of a vector. The mask
lets a vector whose length is not a multiple of 32 end in a partial slice; 785 tokens, for
example, is 24 full slices and one with 17 lanes. Masked lanes are ignored and output as 0.
A vector can have at most `MAX_LEN = 1024` elements, i.e. 32 slices. The mask of an accepted
slice must not be all zero (an assertion checks this).

Each unit has two stages that communicate through **ping-pong buffers** (`pingpong_buffer`),
two banks each. Stage 1 fills one bank while Stage 2 drains the other, so a new vector can
enter while the previous one is being output. Stage 1 stalls (`in_ready` low) only when
both banks are occupied.

## E2Softmax Unit (`e2softmax_unit`)

### Number formats

| quantity | format |
|---|---|
| input x | signed 8-bit, Q4.4 (value = code / 16) |
| Log2Exp output k | unsigned 4-bit, exp(x - m) ~ 2^-k |
| reduced sum S | unsigned 26-bit, 15 fraction bits (S <= 1024) |
| output | unsigned 8-bit, Q0.8 (value = code / 256) |

### Log2Exp (`log2exp_unit`)

For d = m - x >= 0 the unit computes k = clip(round(d / ln 2), 0, 15). 1/ln 2 is replaced
by 1.4375 = 1 + 1/2 - 1/16. The product is formed as (16d + 8d - d) / 16 with four guard
bits, so it is exact, and then rounded to the nearest integer (ties upwards). The clip to
15 is the 4-bit log2 quantiser. Any element more than about 10.4 below the maximum
contributes 2^-15.

### Stage 1: unnormalised softmax with online normalisation

Per accepted slice, in one cycle:

1. `max_unit` finds the slice's local maximum with a comparison tree over the valid lanes.
2. The running maximum is m = max(local max, global max so far). For the first slice it is
   the local max.
3. Each valid lane gets Y_i = Log2Exp(m - x_i). Its 4-bit value and the mask go into the
   **Output Buffer**, and m goes into the **Max Buffer** at the slice's index.
4. The **Correction** c = Log2Exp(old global max - m) is 0 unless the maximum rose.
5. The reduced sum is updated as S <- (S >> c) + sum_i 2^-Y_i. `reduction_unit` adds the
   one-hot words 2^(15-Y_i); with 15 fraction bits every term is exact.

After the last slice, S and the final global maximum M go into the **Sum Buffer** entry of
the bank. The elements of earlier slices were quantised against a smaller running maximum
than M. They are not revisited in Stage 1; Stage 2 corrects them. This is the online
normalisation: Stage 1 needs only one pass over the input.

### Stage 2: normalisation and the approximate log divider (`al_divider`)

For each buffered slice j with running maximum m_j, Stage 2 computes
sub_j = Log2Exp(M - m_j) once. Each element's exponent is then k = min(Y + sub_j, 15). The
saturation has no effect, because any k >= 8 already gives an output of 0.

The divider approximates 2^-k / S. Write S = 2^ks (1 + s):

* the leading-one detector over the integer part of S gives ks. S >= 1 always, because the
  maximum element contributes 2^0;
* shifting S right by ks brings the bit below the leading one into a fixed position. That
  bit, q(s) = floor(2s)/2, is the select of a two-way mux;
* the mux outputs (1.636 - q)/2: **0.818** (code 209) for q = 0 and **0.568** (code 145) for
  q = 1/2. The constant 1.636 makes the approximation unbiased for s uniform on [0,1);
* the mux output is shifted right by k + ks.

Together: y = 2^-(k + ks + 1) (1.636 - q(s)). The testbench bounds the result within about
23 % of the exact quotient, plus one LSB of truncation.

### Timing

Both stages handle one slice per cycle. The first output slice of a vector is valid in the
cycle after its last input slice was accepted. With no back-pressure, V back-to-back
vectors of N slices each take V*N + N cycles from the first input slice to the last output
slice. The testbench checks this exactly.

Each output is coarse by construction. The exponent is rounded to a power of two (up to
a factor of sqrt(2) either way), and the divider adds up to about 23 %. The unit testbench
therefore checks every output only to within a factor of 2.2 (plus one LSB) of the exact
softmax of the same inputs; all outputs passed that bound. Output data are driven from
registers and buffer
contents through the divider logic. There is no combinational path from `out_ready` to
`out_data`.

## AILayerNorm Unit (`ailayernorm_unit`)

### Inputs and formats

| quantity | format |
|---|---|
| input X | unsigned 8-bit, with a per-token zero point `zp` |
| PTF alpha | 2 bits per channel (0..3): the real value is s * (X - zp) * 2^alpha |
| `inv_n` | 1/C with 20 fraction bits, i.e. round(2^20 / C), supplied by the user |
| mean | signed, 4 fraction bits |
| E(x^2), variance | unsigned, 8 fraction bits |
| 1/sigma | unsigned 24-bit, 16 fraction bits |
| gamma | signed 8-bit, Q1.6 |
| beta, output | signed 8-bit, Q3.4 |

LayerNorm does not depend on the input scale s, so s never enters the hardware. `zp` and
`inv_n` must be held stable while a token is in the unit.

### Stage 1: statistics

Every slice is reduced to d = X - zp (9 bits, signed). Then:

* **Ex Unit** (`ex_unit`): adds d << alpha over the lanes (12-bit terms) into an
  accumulator. After the token, the sum is multiplied by 1/n.
* **Ex² Unit** (`ex2_unit`): `dyn_compress` codes |d| (8 bits) as a 4-bit y and a flag s.
  If |d| >= 64 (bit 7 or bit 6 set), y = round(|d| / 16) and s = 1; otherwise
  y = round(|d| / 4) and s = 0; y is clipped to 15. A 16-entry table gives y². The
  decompress step shifts it left by 4 when s = 1, then by 2·alpha for the PTF: the PTF
  shift is applied after squaring, (X << a)² = X² << 2a. The lanes are accumulated. The
  common factor 16 is applied once, after accumulation (sum << 4), before the 1/n multiply.
  For uniform 8-bit inputs the compressed E(x²) is within a few percent of the exact value.
* **Input Buffer**: d, alpha and the mask of every slice go into the Stage 1 bank.

In the cycle after the last slice, `preprocess_unit` forms the variance E(x²) - E(x)².
A negative result, possible because of the compression error, is clamped to 0. The unit
looks up 1/sigma in `rsqrt_lut`. Mean and 1/sigma are registered with the bank. Because
the accumulators are free again in that same cycle, Stage 1 can already take the next
token.

`rsqrt_lut` writes v = 2^p (1 + f) with p = 2h + r. A 32-entry table, indexed by r and the
top four bits of f, holds 256 / sqrt(2^r (1 + (f + 0.5)/16)), the value at the midpoint of
each mantissa bin. The result is shifted right by h. The entries are computed at elaboration
by an integer square root. The relative error is below about 3 %; a zero variance is
treated as one LSB.

### Stage 2: affine transform (`affine_unit`)

Each buffered slice needs a slice of (gamma, beta) from the weight stream
(`w_valid`/`w_ready`). An output slice is produced only when both are present. Per lane:

    A  = gamma * (1/sigma)            first multiplier
    X' = (d << alpha) - mean          re-applied PTF, mean removed
    y  = round(A * X') + beta         second multiplier, round half up, saturate to int8

### Timing

Both stages handle one slice per cycle. Stage 2 of a token can start two cycles after its
last input slice: one cycle for the preprocess, one to register it. With no back-pressure, a
bank is freed one cycle later than a perfect hand-over would allow. Two tokens of N slices
therefore take 2N + 1 cycles in steady state. Four back-to-back tokens of 6 slices span 32
cycles, which the testbench checks. `out_valid` depends combinationally on `w_valid`, and
`w_ready` on `out_ready`.

### Accuracy

Against a floating-point LayerNorm of the same quantised inputs and weights, the largest
deviation seen in the unit testbench is about 5 output LSB (Q3.4, i.e. 0.3). Outlier-heavy
tokens with non-zero PTFs are the worst case.

## Departures and choices

These follow from the source, but not word for word:

* **Log2Exp constants.** The source's text uses x + x>>1 - x>>4 (= 1.4375x). Its block
  diagram labels the shifters "<<1" and "<<4". The text is followed.
* **Decompress shift.** The source's algorithm listing shifts each square by 4s + 4 and
  the accumulated sum by 4 again. That would apply the factor 16 twice. The block diagram
  (mux between value and value << 4, then << 2 alpha) is followed here, with a single << 4
  after accumulation.
* **Input Buffer width.** The source's summary speaks of 8-bit buffering. Its dataflow,
  however, sends X - zp to the buffer, which needs 9 bits. This design stores the 9-bit d
  and the 2-bit alpha.
* **Running maximum at slice granularity.** The per-element recurrence of the algorithm is
  applied per 32-element slice: all lanes of a slice use the same running maximum. This is
  what the block diagram's Max Buffer and Correction path imply.
* **Compression of signed data.** Dynamic compression is defined for unsigned inputs. It is
  applied here to |X - zp|, which leaves the square unchanged.

These are this design's own, where the source is silent:

* valid/ready slice streams, lane masks, the separate gamma/beta stream, `inv_n` as an input;
* all fixed-point formats in the tables above, the Q0.8 coding of 0.818/0.568 as 209/145,
  and rounding with ties upwards;
* the size and indexing of the x^-0.5 table, and the clamp of a negative or zero variance;
* register-array buffers with a combinational read port, not SRAM macros;
* accumulator widths sized for 1024 channels, 2-bit PTF (0..3).

Not built: the system controller and the shared memory, which the source only names; and
the 32-fold replication that the source used for its GPU comparison.

## Parameters

The shared constants are in `rtl/sole_pkg.sv`. `LANES` and `MAX_LEN` are also parameters
of `sole_top` and the two units (`MAX_C` on the LayerNorm unit), with defaults 32 and 1024.
`MAX_LEN` must be a multiple of `LANES`. The number formats are package constants. If you
change one, check the derived widths: `SUM_W` must hold log2(MAX_LEN) + 1 integer bits, and
the accumulators in `ex_unit`/`ex2_unit` are sized for 1024 channels.

## Files

| file | contents |
|---|---|
| `rtl/sole_pkg.sv` | shared constants and formats |
| `rtl/sole_top.sv` | top level: one Softmax and one LayerNorm unit |
| `rtl/e2softmax_unit.sv` | Softmax unit: two stages, three ping-pong buffers |
| `rtl/max_unit.sv`, `rtl/log2exp_unit.sv`, `rtl/reduction_unit.sv` | Stage 1 subunits |
| `rtl/al_divider.sv` | approximate log-based divider |
| `rtl/ailayernorm_unit.sv` | LayerNorm unit: two stages, Input Buffer, statistic registers |
| `rtl/ex_unit.sv`, `rtl/ex2_unit.sv`, `rtl/dyn_compress.sv` | statistics |
| `rtl/preprocess_unit.sv`, `rtl/rsqrt_lut.sv` | variance and 1/sigma |
| `rtl/affine_unit.sv` | normalisation and gamma/beta |
| `rtl/pingpong_buffer.sv` | two-bank buffer |
| `tb/sole_ref_pkg.sv` | bit-level reference models used by the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. A watchdog
counts a failure if the test hangs. For example, the whole-design test:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/sole_pkg.sv tb/sole_ref_pkg.sv tb/tb_sole_top.sv --top-module tb_sole_top
    ./obj_dir/Vtb_sole_top

Verilator finds the other modules through `-Irtl` (one module per file, named after the
file). Replace `tb_sole_top` with any other testbench name to run that one. The tests use
`$urandom` without a fixed seed beyond the simulator's default. All run in seconds.

What the tests establish:

* each arithmetic block matches an independent model written from the algorithm. That model
  uses real arithmetic and loops, not the hardware's shifts and trees. The small blocks are
  tested exhaustively (Log2Exp, compression) or with thousands of random vectors;
* the approximations stay inside stated error bounds: the divider, the compressed
  E(x²), x^-0.5, and the whole LayerNorm against floating point;
* both units produce bit-exact results for vectors of 1 to 1024 elements, under random
  input gaps, output back-pressure and weight gaps. Their cycle counts match the timing
  given above;
* `tb_sole_top` runs the top at its default size with the vector lengths of DeiT (197 and
  785 tokens; 192, 384 and 768 channels), Swin-B (1024 channels) and BERT-Base (128 and
  384 tokens; 768 channels). It also checks that every mechanism happened: stalls on full
  banks, overlapped stages, back-pressure, partial slices, the online correction, both
  divider constants, both compression ranges, non-zero PTF, and waits for weights.

What they do not establish: accuracy on real models. The published accuracy results
(ImageNet, GLUE, SQuAD) come from software emulation of the algorithms. They are not
reproduced here, and this design's own format choices could change them slightly. Timing
closure at 1 GHz has not been attempted either: the Stage 2 path of the LayerNorm unit
holds two multipliers in series, and the preprocess path runs from the accumulators
through a squarer and the table in one cycle.
