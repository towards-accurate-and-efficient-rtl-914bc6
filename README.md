# ShiftQuant integer-training datapath

Training a network in 4- to 6-bit integers fails mostly on the gradients. A few
channels of a gradient matrix hold values orders of magnitude larger than the
rest. With one scale for the whole tensor, the small channels round to zero.
With one scale per channel, the matrix multiply has to be split by channel and
the data reshuffled in memory. This design takes a path between the two:

* **Power-of-two grouping.** Every channel of the inner (reduction) dimension is
  put in one of `NG = 4` groups. Group `g` uses the step
  `(tau_0 / B) * 2^-g`, where `tau_0` is the largest channel range in the
  tensor and `B = 2^(BITS-1) - 1` is the largest code. All groups share one
  scale up to a power of two.
* **ShiftMM.** Because the group scales differ only by powers of two, the
  multiply needs no per-group split. Each product `A[i][k] * B[k][j]` is
  shifted by its channel's group before it is added. The operands stay where
  they are in memory; the only extra hardware is a shifter per accumulator.
* **Fully-quantized L1 batch normalization.** Normalization divides by the
  mean absolute deviation (an L1 norm) instead of the standard deviation. It
  needs no square or square root. Its statistics quantize more gracefully, so
  input, statistics and affine parameters can all be low-bit integers.

The RTL implements the quantizer, the ShiftMM matrix unit with the packed-DSP
multipliers of an FPGA implementation, and the L1 normalization unit. It is
written in synthesizable SystemVerilog (IEEE 1800-2017). Every block has a
self-checking testbench.

The default sizes are those of the FPGA experiment this design is built
around: a `(1024, 288, 32)` matrix product in INT6 with four groups, where 16 DSP
slices each compute two products per cycle.

## Block overview

```
              raw A (16-bit), sent twice
                      |
        +-------------+--------------+
        |                            |
  shiftquant_grouper          shiftquant_quantizer ---- lfsr32 (random bits)
  (pass 1: ranges,            (pass 2: q = SR(x*B*2^g/tau_0))
   tau_0, group map) --tau_0-->  seq_div (reciprocal, once)
        |   grp_map                  |  6-bit codes (4-bit: paired rows)
        +-----------------------> shiftmm_engine
                                     |  LANES/2 x dsp_reuse_mul (LANES/4 at 4 bits)
                                     v
                               C rows (exact, x 2^(NG-1))

  l1bn_unit (separate ports): 8-bit samples -> mean, L1 norm, y = gamma*x_hat + beta
     uses its own seq_div
```

| Module | Role |
|---|---|
| `sq_pkg` | shared constants: `NG = 4`, `BITS = 6`, DSP port widths 18/25, packing offsets |
| `sq_train_top` | top: sequencing of one matrix operation, plus the normalization unit |
| `shiftquant_grouper` | per-channel ranges, `tau_0`, power-of-two grouping map |
| `shiftquant_quantizer` | per-group quantization with stochastic rounding |
| `shiftmm_engine` | weight buffer, packed multipliers, shift-and-accumulate |
| `dsp_reuse_mul` | two or four low-bit products from one 18x25 multiply |
| `l1bn_unit` | fully-quantized L1 batch normalization of one channel |
| `seq_div` | shared restoring divider (one quotient bit per cycle) |
| `lfsr32` | 32-bit Galois LFSR for stochastic rounding |

## Power-of-two grouping

Let `r[k]` be the largest magnitude in inner channel `k`, and let
`tau_0 = max_k r[k]`. The thresholds are `tau_g = tau_0 * 2^-g`. A channel
belongs to the first group whose band contains its range:

```
group(k) = smallest g in 0..NG-2 with  r[k] * 2^(g+1) > tau_0,   else NG-1
```

So a channel in group `g` has its range in `(tau_0/2^(g+1), tau_0/2^g]`. Group 0
holds the largest channels. The last group also takes every channel below
`tau_0 / 2^(NG-1)`, including channels that are all zero. The test needs only
shifts and compares, with no sorting. `shiftquant_grouper` keeps `r[k]` in a
register per channel during the first pass. The map is then combinational from
those registers: `K * 2` bits for `NG = 4`.

The range of a channel is its largest absolute value, because quantization is
symmetric.

## Quantizing with one reciprocal

With `B = 2^(BITS-1) - 1` (31 for INT6), an element `x` of a group-`g` channel
becomes

```
q = SR( x * B * 2^g / tau_0 ),   clamped to [-B, B]
```

`SR` is stochastic rounding. It rounds up with a probability equal to the
fraction it drops, so `E[q]` is the exact scaled value. Gradient estimates then
stay unbiased, which is the point of using it for training.

`shiftquant_quantizer` divides only once per tensor. During the `CFG` phase the
shared divider computes `recip = floor(B * 2^F / tau_0)`, with `F = 24`. This
takes about `BITS + F` cycles. After that, each element costs:

1. `t = (x * recip) << g`: a multiply and a shift.
2. `fl = t >>> F` and `frac = t[F-1:0]`.
3. Round up when the LFSR's low `F` bits are below `frac`.
4. Clamp and register.

The throughput is one element per cycle, and the latency is one cycle. The
reciprocal is truncated, so the code can be off by one step from the
real-valued result. Because of that truncation, the testbenches check that
each code is one of the two grid neighbours of the exact value. A separate
statistical test checks that rounding is unbiased: for four values in
different groups, 3,000 draws each average to the exact scaled value to
within 0.05 of a step.

## The ShiftMM engine

`shiftmm_engine` computes one block of `C = Q(A) * B`. `B` is `K x LANES`, is
already quantized, and is loaded row by row into the weight buffer (`wmem`).
`A` streams in row-major order, one inner index per beat. Each element is
broadcast to `LANES` column accumulators. Each accumulator adds

```
acc[i][j] += (A[i][k] * B[k][j]) <<< (NG-1 - m[k])
```

The shift is a left shift by `NG-1-m[k]`, not a right shift by `m[k]`. The two
differ only by the constant `2^(NG-1)`, and the left shift loses nothing: the
accumulator holds exactly `2^(NG-1)` times the dot product in units of the
group-0 step. To get the right-shift form, shift the result right by `NG-1`.
The accumulator width, `2*BITS + (NG-1) + clog2(K) + 1` bits, cannot overflow
for any input.

Worked example (2 groups, map `(0,1,1,0)`, 4-bit):

```
A = [ 2  0  1  6 ;  -5  1 -2 -4 ]     B = [ 3  7 ; -7 -3 ; 4  1 ; -1 -2 ]
C (exact x2)        = [   4    5 ;  -37  -59 ]
C >> 1 (trunc. to 0) = [   2    2 ;  -18  -29 ]
```

The engine's testbench checks both forms.

Handshakes are valid/ready on both sides. A finished row moves into the
`c_row` output register, and the next row starts accumulating at once. Only the
last beat of the next row stalls (`a_ready` low) if the previous row has still
not been taken. A result row is valid the cycle after its last beat. Two
assertions guard the output side:

* `c_valid` stays up until the row is taken;
* a row waiting to be taken is never overwritten.

### 4-bit mode

With `BITS = 4` one DSP slice yields four products, `x0*y0`, `x1*y0`, `x0*y1`
and `x1*y1`. The second `x` has to be useful, so a beat carries two rows,
`A[i][k]` and `A[i+1][k]`. The 4-bit FPGA result uses half the DSP slices of
the 6-bit one at the same latency. To match that, the 4-bit engine has only
`LANES/4` slices and spends two cycles per beat:

* in the first cycle, the beat is taken and columns `0..LANES/2-1` are updated;
* in the second, `a_ready` is low and columns `LANES/2..LANES-1` are updated
  from a held copy of the beat.

Either width therefore performs `LANES` multiply-accumulates per cycle, and the
engine takes one `A` element per cycle on average. With an odd `LANES/2` the
last slice of each half is only half used.

## Packing products into one DSP slice

A DSP48-class slice multiplies an 18-bit port A by a 25-bit port B. The
operands are placed at fixed offsets so that one product holds several
independent ones:

| BITS | port A | port B | product fields |
|---|---|---|---|
| 8 | `x0` | `y0 + y1<<16` | `x0*y0` [15:0], `x0*y1` [31:16] |
| 6 | `x0` | `y0 + y1<<18` | `x0*y0` [11:0] (field [17:0]), `x0*y1` [29:18] |
| 4 | `x0 + x1<<8` | `y0 + y1<<16` | `x0*y0` [7:0], `x1*y0` [15:8], `x0*y1` [23:16], `x1*y1` [31:24] |

The published packing diagrams show unsigned fields. With two's-complement
operands, a negative lower product borrows from the field above it. Cutting
the product at the field boundaries is then wrong for roughly a quarter of all
operand combinations. `dsp_reuse_mul` therefore extracts
the fields from the bottom up:

```
rem = P
for each field f:  field_f = rem[FS-1:0]          (read as signed)
                   rem     = (rem - field_f) >>> FS
```

Subtracting the sign-extended field before the shift cancels the borrow. Every
product is then exact for every signed operand pair. This is checked
exhaustively for 4- and 6-bit operands and with random operands for 8 bits. The
module is combinational and states the multiply as `*` on 18- and 25-bit
operands, so a synthesis tool can map it onto one DSP slice. With `BITS` 6 or 8
only two products exist, and `p[1][*]` is tied to zero.

## Top level: one operation in two passes

`sq_train_top` sequences one `M x K` by `K x LANES` product:

| Phase (`op_phase`) | What happens | Cycles (no stall) |
|---|---|---|
| `IDLE` (0) | `B` rows may be written through `w_*` | - |
| `SCAN` (1) | `A` streams in once; the grouper records ranges | `M*K` |
| `CFG` (2) | the quantizer computes its reciprocal from `tau_0` | about `BITS+F` |
| `QUANT` (3) | `A` streams in again; it is quantized and multiplied, and `C` rows leave on `c_*` | `M*K + 2` |

`op_start` clears the ranges and starts `SCAN`. `op_busy` stays high until the
last `C` row has been taken, and then `op_done` pulses. `r_max` and `grp_map`
show the current grouping.

`A` is therefore read twice from wherever it lives. No copy of `A` and no
reordering of it is kept in the design. With `BITS = 4` the engine needs row
pairs, so `A` must be sent as pairs of rows interleaved column by column:
`A[i][k], A[i+1][k], A[i][k+1], ...`. A small gather stage pairs consecutive
quantizer outputs into one beat.

At the defaults (`M = 1024`, `K = 288`, `LANES = 32`) the quantize-and-multiply
phase takes 294,914 cycles, and the whole operation takes about 590,000. The
reported FPGA latency for this size is 4.63 ms. That matches the multiply phase
at roughly 64 MHz, but no clock frequency is published, so the comparison is
only indicative.

The L1 normalization unit sits in the same top with its own ports (`bn_*`). No
connection between normalization and the matrix unit is described, so none is
made.

## L1 batch normalization

`l1bn_unit` normalizes one channel of `n` 8-bit samples. For batch norm,
`n = batch * height * width`.

```
mu      = round(sum x / n)                      (rounded half away from zero)
sigma   = sum |x - mean|                         (plain sum, as published)
sigma_q = mant * 2^e,  mant < 2^8                (8 significant bits, truncated)
x_hat   = (x - mu) * floor(2^24 / mant) >>> (24 - 16 + e)   (16 fraction bits)
y       = gamma * x_hat + (beta << 16)
```

`gamma` and `beta` are 8-bit integers, and `y` is a fixed-point value with 16
fraction bits. The unit reads the channel three times and stores no samples:

1. **Pass 1** sums the samples. The divider then forms the rounded mean as
   `(2|S| + n) / (2n)`.
2. **Pass 2** accumulates `sum |n*x - S|`. This equals `n` times the exact L1
   deviation from the unrounded mean. It is divided by `n` and then quantized
   to 8 significant bits.
3. After a third division for the reciprocal, **pass 3** produces one output
   per cycle, one cycle after its sample.

`phase` reports the state, and `done` pulses after the last output. When
`sigma` is 0 (a constant channel), `x_hat = 0` and `y = beta`. Each pass runs at
one sample per cycle. The three divisions share one `seq_div` and add about
`3 * (2*NW + IN_W + 2)` cycles. `NW = 16` allows channels of up to 65,535
samples.

The published definition of the L1 norm is a sum over the channel, without a
division by `n`. The unit follows it literally. The learned `gamma` absorbs the
constant factor, and `x_hat` is `n` times smaller than with a mean absolute
deviation. Change the pass-2 division if the mean form is wanted.

## Parameters and what fits

| Parameter | Default | Origin |
|---|---|---|
| `BITS` | 6 | INT6 FPGA implementation (4 and 8 also supported) |
| `NG` | 4 | default group count (a 2-bit grouping map) |
| `M, K, LANES` | 1024, 288, 32 | FPGA matrix size; 16 DSPs x 2 products |
| `RAW_W` | 16 | own choice: width of the un-quantized operand |
| `F` | 24 | own choice: fraction bits of the quantizer reciprocal |
| `BN_IN_W, BN_PAR_W` | 8, 8 | 8-bit normalization |
| `BN_NW` | 16 | own choice: channel size up to 65,535 |
| `R, FR` (l1bn) | 24, 16 | own choice: reciprocal and output precision |

What the default build holds:

* **The `(1024, 288, 32)` INT6 FPGA product** fits. It is simulated end to end
  at exactly these sizes.
* **The INT4 FPGA product** needs `BITS = 4`. That build uses 8 packed DSP
  slices and the same cycle count. It is simulated at reduced sizes.
* **Linear layers with an inner dimension up to 288** fit as several
  operations, one per 32-column slice of the weights. `A` is zero-padded to
  1024 rows and 288 channels. Padded channels fall in the last group and add
  nothing.
* **Inner dimensions above 288** do not fit. This includes 512-wide layers,
  transformer layers and most ResNet convolutions. The top has no accumulation
  across operations. Splitting `K` or `M` would also give each part its own
  `tau_0`, which changes the quantization.
* **Normalization** fits the evaluated feature sizes, with up to
  16 x 512 = 8,192 samples per channel. Batch norm over a large batch of 32x32
  images exceeds `NW = 16` and needs a wider `BN_NW`.

## Departures from the published design, and own choices

* **Signed fields in DSP packing.** The packing diagrams are unsigned; the
  borrow-corrected extraction above is added so that signed products are exact.
* **Shift direction.** The left-shift form with a `2^(NG-1)`-scaled result is
  used throughout. The right-shift form, which truncates, is only checked in the
  testbench.
* **Hardware quantizer and grouper.** The published quantizer runs in software
  on CPU and GPU. The two-pass streaming scheme, the reciprocal multiply and the
  LFSR are this design's. So are the range definition (max `|x|`), the clamp and
  the raw width.
* **4-bit pairing.** How the 4-bit FPGA design pairs its operands is not
  published. The two-row, two-cycle beat is one arrangement that matches its
  DSP count and latency.
* **Normalization arithmetic.** The published flow specifies quantized inputs,
  statistics and parameters. The rounding of `mu`, the 8-significant-bit form
  of `sigma`, the reciprocal and the fixed-point output are this design's.
* **Not built:**
  * the backward pass of the normalization layer;
  * weight quantization (`B` arrives already quantized);
  * per-tensor, FP16 and other comparison baselines.

  The DSP slice itself is a vendor primitive. It is inferred from `*`, not
  instantiated.

## Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_dsp_reuse_mul` | all 4- and 6-bit operand combinations, random 8-bit, against `x*y` |
| `tb_shiftquant_grouper` | the worked example (scaled) and random tensors against the threshold rule |
| `tb_shiftquant_quantizer` | grid neighbours, unbiasedness of rounding, clamping, `tau_0 = 0`, configuration time |
| `tb_shiftmm_engine` | the worked example in both forms and the 4-bit two-cycle beat; random 6-bit, 4-group matrices with back-pressure; exactly `rows*K` cycles at full rate |
| `tb_l1bn_unit` | bit-exact statistics and outputs, closeness to the real-valued formula, one sample per cycle per pass, a constant channel, back-pressure |
| `tb_l1bn_workload` | the same checks at the evaluated feature-map sizes (1,024 to 8,192 samples per channel) |
| `tb_sq_train_top` | end to end at reduced size, 6-bit with result back-pressure and 4-bit |
| `tb_sq_train_top_linear` | two linear layers with inner dimension 256, zero-padded to the default size: one 32-column slice each |
| `tb_sq_train_top_full` | end to end with every top parameter at its default: one full `(1024, 288, 32)` operation |

The end-to-end runs (`top_runner`) compute their own references:

* the grouping map;
* that each quantized code is a neighbour of its exact value (the codes are
  observed at the quantizer output, because the random bits are internal);
* every `C` entry, bit-exactly;
* a bound on the error of dequantized `C` against the real product `A*B`;
* the normalization outputs;
* the cycle count.

They also count each mechanism and fail if any never happened: use of every
group, rounding in both directions, input stalls caused by result
back-pressure, and two-row beats.

Each block was also run against a deliberately broken copy of itself, and its
testbench reported failures:

* packing without borrow correction;
* shift by `m[k]` instead of `NG-1-m[k]`;
* thresholds one octave off;
* always rounding up;
* a truncated mean;
* every element quantized as group 0.

### Running a testbench with Verilator

From the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/sq_pkg.sv tb/tb_sq_train_top.sv --top-module tb_sq_train_top
./obj_dir/Vtb_sq_train_top
```

Replace the testbench name to run another one. The full-size run takes a few
seconds. The simulator has two states, so every register that is read is
reset.

## Changing the design

* **Operand width:** `BITS` (4, 6 or 8) on `sq_train_top`. The packing offsets
  come from `sq_pkg::yoff`.
* **Problem size:** `M`, `K` and `LANES`. `LANES` is the number of output
  columns computed in parallel; the DSP count is `LANES/2`, or `LANES/4` at 4
  bits. The weight buffer is `K x LANES x BITS` bits.
* **Groups:** `NG`. The map width is `clog2(NG)`, and the accumulator grows by
  one bit per extra group.
* **Quantizer precision:** `F`. The LFSR supplies up to 32 random bits.
