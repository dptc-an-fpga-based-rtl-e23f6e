# DPTC: lossless trace compression at one sample per clock

Front-end electronics that record whole flash-ADC traces produce far more
data than links and disks like. The traces are mostly slowly varying
baseline plus noise, with short pulses. In such data consecutive samples are
close, so their differences are small numbers. Small numbers need few bits.

DPTC (difference predicted trace compression) uses exactly that. It needs no
configuration, no tables and no training data. Each sample is replaced by its
difference to the previous sample. The differences are stored in groups of
four, each group using only as many bits per value as its widest member
needs. A short header in front of each group says how wide the values are.
The bits are packed into 32-bit words. On noisy detector traces this gives
about 4 to 5 bits per sample for 16-bit samples. A noise-free trace costs
1.5 bits per sample, the floor of the format.

This repository holds synthesizable SystemVerilog for the compressor as one
streaming module, `dptc_top`. It accepts one sample per clock cycle, whatever
the data, and never stalls. The compression method and its stream format come
from the published DPTC method (G. Bruni and H. T. Johansson, "DPTC - an
FPGA-based trace compression"). The RTL here is an independent implementation
of that description. Where the description left something open, this design
makes its own choice. Each such choice is listed in
"Choices made in this design" below.

## The stream format

A trace of `n`-bit samples (`n` = 5..16, parameter `N`, default 16) becomes a
bit stream. Bits are written least significant bit first and packed into
32-bit words from bit 0 upwards. A field that does not fit the current word
continues at bit 0 of the next word.

1. **First sample.** The first sample is stored whole, in `n` bits.
2. **Differences.** Every later sample becomes `d = x[i] - x[i-1]`, computed
   modulo `2^n` and read as an `n`-bit two's-complement number. Wrap-around
   is harmless, because the decoder also adds modulo `2^n`.
3. **Sign rule.** An `m`-bit two's-complement field holds one more negative
   value than positive ones: 3 bits hold -4..3. On a noisy baseline a step
   up is usually followed by a step down. The stored value is therefore
   negated whenever the last non-zero stored value was negative. A positive
   stored value ends the negation, and a zero changes nothing. This makes
   negative stored values the common case.
4. **Groups of four.** The stored values are taken four at a time. Each value
   needs `w(v)` bits, the smallest `w >= 1` with
   `-2^(w-1) <= v <= 2^(w-1)-1`. The group uses `m`, the largest of these.
   Zero-width groups do not exist: an all-zero group still costs 1 bit per
   value.
5. **Header.** Let `dm = (m - m_prev) mod n`, where `m_prev` is the previous
   group's width. For the first group `m_prev = n`, the width of the first
   sample.

   | header bits (first bit on the right) | meaning |
   |---|---|
   | `01` | `m = m_prev - 1` |
   | `10` | `m = m_prev` |
   | `11` | `m = m_prev + 1` |
   | `00` then `k` bits holding `dm - 2` | any other change |

   The field width is `k = ceil(log2(n-3))`: 1 bit for n = 5, 2 bits up to 7,
   3 bits up to 11 and 4 bits up to 16. A long header is `2 + k` bits, 6 bits
   for n = 16. The change is taken modulo `n` because the short codes cover
   -1, 0 and +1. That leaves `n-3` other changes (2..n-2), which is exactly
   what `k` bits can count.
6. **Values.** Each value `v` of the group is stored in `m` bits as
   `v + 2^(m-1)`. This makes it an unsigned number, so the decoder subtracts
   the bias and needs no sign extension.
7. **End of trace.** The last group may hold fewer than four values. It has
   its own header and only the values that exist. The last word is padded
   with zeros.

The stream does not record how many samples or words it holds, nor `n`. The
user keeps these next to the data, and a decoder needs all three.

Worked example: a constant trace of 1000 samples costs 16 bits for the first
sample, plus 249 groups of `2 + 4x1` bits, plus a last group of `2 + 3x1`
bits. That is 1515 bits, or 1.515 bits/sample, in 48 words.

### Optional linear predictor

With `PREDICTOR = 1` a second difference is stored on long slopes. If the
three previous first differences were all non-zero and of the same sign, the
stored value is `d - d_prev` instead of `d`. Any zero or sign change among
those three switches the predictor off again. On real detector traces it does
not help, because flat noisy parts trigger it spuriously. It is therefore off
by default, and the rest of this document assumes it is off.

## Pipeline

```
input_val,dv_in,flush -> [input regs] -> dptc_diff -> dptc_group -> dptc_merge -> output_word,dv_out,done
                                       (stage 1)    (stage 2a)     (stage 2b, uses dptc_shifter)
```

`dv` and `flush` travel beside the data through every stage, so each stage
knows when it holds a valid value and when a trace has ended.

* **`dptc_diff`** (1 cycle) keeps the previous sample, the sign-rule flag and
  the predictor history. It flags the first sample of each trace.
* **`dptc_group`** is the part that needs the most care. The header must
  precede the group's values, but the header depends on all four values. The
  stage therefore has two register banks. The *collect* bank gathers four
  values and tracks their maximum width. When the fourth value arrives, the
  group moves to the *issue* bank together with its header. The issue bank
  sends out one item per cycle over the next four cycles: the first value
  with the header, then the other three bare. A new group cannot be complete
  before four more cycles have passed, so the issue bank is always free in
  time and no stall is ever needed. The first sample of a trace goes straight
  to the issue bank as a 16-bit item with no header.

  On flush, a partly filled collect bank is handed over as soon as the issue
  bank is free. `flush_o` rises only when both banks are empty.

  An item is `{value[N-1:0], header[H-1:0]}` with `H = 2 + k`. The header is
  left-aligned against the value: a short header sits in the top two bits of
  the header field. The value is already biased and masked to `m` bits.
* **`dptc_merge`** holds up to 31 pending bits. The barrel shifter
  (`dptc_shifter`) moves each item to the first free bit. For n = 16 the
  shifter takes 22 bits in, shifts by 0..37 and gives 60 bits out; these are
  the sizes quoted for the original circuit. The shift is the fill level plus
  the item's header length, and the lowest `H` output bits are dropped. At
  most 31 + 22 = 53 bits are then in play, so at most one word leaves per
  cycle. On flush the partial word is sent, if there is one, and `done`
  pulses in the same cycle.

Latency: a value's bits reach `output_word` a few cycles after the value
enters: 1 input register, 1 in stage 1, 1 to 5 in group formation and 1 in
merging. `done` comes at most 9 cycles after `flush` is raised.

## Interface and protocol

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `reset` | in | 1 | synchronous, active high; hold it for at least 4 cycles |
| `input_val` | in | N | sample |
| `dv_in` | in | 1 | `input_val` is valid this cycle; idle cycles between samples are allowed and do not change the output (the published circuit was described as taking a sample every cycle) |
| `flush` | in | 1 | raise after the last sample of a trace, hold until `done` |
| `output_word` | out | 32 | compressed word |
| `dv_out` | out | 1 | `output_word` holds a completed word |
| `done` | out | 1 | one-cycle pulse: the trace is finished and its last word is out, possibly in the same cycle |

Do not give samples while `flush` is high. After `done`, drop `flush`. The
next sample, which may arrive in the same cycle that `flush` drops, starts a
new trace. Inputs and outputs are registered: 16 + 3 flip-flops in and
32 + 2 out for N = 16.

Parameters of `dptc_top`: `N` (default 16), `PREDICTOR` (default 0) and
`SHIFT_MULT` (default 0). With `SHIFT_MULT = 1` the shifter computes
`din * 2^sh`, with the one-hot factor decoded from the shift amount, so an
FPGA tool can use its DSP multipliers. The output is identical. The
published evaluation found this form no cheaper than multiplexers.

## Choices made in this design

These points are not settled by the published description. Each was decided
here.

* **Width change modulo `n`, and the start value `m_prev = n`.** The modulo
  reading is the only one consistent with the stated field size `k`. The
  start value reproduces the short header that the published illustration
  shows on the first group.
* **Partial last group.** It holds only the remaining values and is not
  padded to four. The last word is zero-padded.
* **`done` is a one-cycle pulse**, rather than a level.
* **Shifter input layout.** The published text gives the extra shift as 0, 4
  or 6 for long, short or no header. That implies an input layout it does not
  describe. Here the extra shift is the header length (6, 2 or 0). The sizes
  are the same, with 22 bits in, 38 positions and 60 bits out, but the
  offsets are assigned differently.
* **Predictor rule details.** The three previous *first* differences are
  used, and the history restarts with each trace.
* **Not built.** The optional extra pipeline stages of the original are not
  built, because they are not specified; the pipeline here is fixed. There
  is no decompressor in RTL: the decoder exists only in the testbench
  package.

Synthesis with a generic flow gives 318 flip-flop bits for N = 16. That falls
inside the 234 to 324 flip-flops reported for the original on several FPGA
families. Clock frequency has not been measured. The original reaches
210 to 400 MHz depending on the FPGA.

## Verification

`tb/dptc_ref_pkg.sv` holds a bit-serial reference encoder and an independent
decoder, written with integer arithmetic and bit queues. Every testbench
checks against this package and prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it shows |
|---|---|
| `tb_dptc_diff` | stage 1, predictor off and on, against the reference stage-1 values, with random gaps; 1-cycle latency of dv/first/flush |
| `tb_dptc_group` | the item stream, rebuilt into bits, equals the reference bit stream; unused item bits are zero; flush ordering; issue timing |
| `tb_dptc_shifter` | all 38 shift amounts, multiplexer and multiplier forms, against multiplication by `2^sh` |
| `tb_dptc_merge` | words against a bit-queue model, one cycle after the completing item; padded last word; single `done` pulse |
| `tb_dptc_top` | whole design at defaults: a trace built to have the group widths of the published illustration (1,1,8,8,7,6,5,3,3,2 bits, two long headers, 218 bits), a similar exponential pulse, flat 1000-sample traces (1515 bits each), noisy pulses, full-scale wrap, traces of 1..40 samples, input gaps, back-to-back traces; words equal the reference and decode to the input; `done` within 9 cycles; counts every header kind, partial groups, values split across words, sign inversions and padded last words, and fails if any never occurred |
| `tb_dptc_top_variants` | the same with `PREDICTOR = 1` and `SHIFT_MULT = 1` |
| `tb_dptc_nbits` | four copies with n = 5, 7, 11, 12 (k = 1..4) against the reference for each n |
| `tb_dptc_workload` | cost per sample on 500-sample synthetic traces (see below) |

Measured cost per sample (first sample and average last-word padding
excluded):

* Noise-free trace: 1.48 bits/sample (format floor 1.5).
* Gaussian noise with sigma = 2^b, b = 2..8: b + 2.96 to b + 2.98. The
  published curve is b + 2.95.
* Uniform noise over 2^b integer values: about b + 1.2. The published curve
  reads b + 1.67. Counting bits directly gives b + 1.2 for this format:
  differences need b + 1 bits unless all four values of a group fit in b
  bits, which happens about a third of the time. The gap is therefore most
  likely a different definition of "span" in the published plot, not a
  difference in the encoder. This is not proven.
* Gaussian pulses on sigma = 2 noise (A = 300/1000/3000, w = 3/5/10): 64, 125
  and 297 extra bits. The published pulse-cost model with its fitted
  constants gives 66, 119 and 245. Agreement is close for small pulses and
  about 20 % off for the largest.

The real detector traces used in the published evaluation are not available,
so their costs are not reproduced.

## Simulating

Every testbench runs with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dptc_pkg.sv tb/dptc_ref_pkg.sv rtl/dptc_diff.sv rtl/dptc_group.sv \
  rtl/dptc_shifter.sv rtl/dptc_merge.sv rtl/dptc_top.sv tb/tb_dptc_top.sv \
  --top-module tb_dptc_top -o sim
./obj_dir/sim
```

For another testbench, replace the last file and the top module. Every
testbench finishes within seconds. To change `n`, set `N` on `dptc_top` and
use the same `N` in the reference calls. The reference model handles any
`n` from 5 to 16.
