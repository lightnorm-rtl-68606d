# LightNorm: range batch normalization in 10-bit floating point, with a training accelerator around it

Batch normalization is cheap in arithmetic but expensive in memory traffic and precision. The
textbook form needs the mean before it can compute the variance, so every activation is read twice.
It also needs FP32 to keep the variance stable. This design removes both costs:

* **Range normalization.** The standard deviation is estimated from the spread of the data,
  `sigma = C(B) * (xmax - xmin)` with `C(B) = 1/sqrt(2 ln B)`. The mean, the maximum and the minimum
  all come out of a single pass over the data, and no squares are needed.
* **10-bit floating point.** The forward pass uses FP10-A `{1,5,4}` (sign, 5 exponent bits, 4
  fraction bits). The backward pass, whose gradients need range more than precision, uses FP10-B
  `{1,6,3}`.
* **Block floating point for storage.** Groups of four neighbouring channels share one exponent
  (the largest of the four). Four FP10-A values then take 25 bits instead of 40, and four FP10-B
  values take 22.

The RTL has two levels:
* `lightnorm` is the normalization hardware: 32 forward lanes, 32 backward lanes, a scalar unit, a
  C(B) table and a control unit.
* `lightnorm_accel` is a small training accelerator built around it. It has 32 KB input and weight
  buffers, a 24 KB output buffer, a 32×32 systolic array (FP8 multiply, FP32 accumulate) and
  FP32→BFP10 converters. The array's 32 columns feed the 32 lanes directly.

## Number formats

All formats are packed as `{sign, exponent, fraction}` with a hidden leading one and bias `2^(EW-1)-1`
(`lightnorm_pkg`).

| format | fields | use |
|---|---|---|
| FP10-A | 1,5,4 | forward statistics and normalization |
| FP10-B | 1,6,3 | backward pass, k0/k1 coefficients |
| FP8 | 1,5,2 | array weights and activations |
| FP32 | 1,8,23 | array accumulation |

These choices are this design's own; the published description does not fix them:
* An exponent field of 0 means zero. There are no subnormals, so the smallest magnitude is
  `2^(1-bias)`; this matches the value ranges the formats are usually quoted with.
* The all-ones exponent is never produced. Overflow saturates to the largest finite value, and
  there is no Inf or NaN.
* Every operator (`fp_add`, `fp_mul`, `fp_div`, `fp_sqrt`, `fp_convert`) computes an exact result
  and rounds once, to nearest-even, through the shared `fp_round`.
* Division by zero returns the largest value with the quotient's sign. This matters when all
  elements of a channel are equal, so `sigma = 0`.

## Forward pass: two passes over x, two streams

Each forward lane (`fw_block`, 32 of them in `fw_module`) holds two units:

* **FWU0** (`fwu0`) takes one element per cycle. It accumulates `x` with an FP10-A adder and
  tracks the maximum and minimum. After the N-th element it forms:
  * `mu = sum * (1/N)`, where the host supplies 1/N as an FP10-A constant;
  * `sigma = C(B) * (xmax - xmin)`.

  Results appear 3 cycles after the last element and are held.
* **FWU1** (`fwu1`) computes `y = ((x - mu) / sigma) * gamma + beta`. Its four pipeline stages
  give a latency of 4 cycles.

FWU1 needs the finished statistics, so the data is read twice. The two reads are separate
streams:
* **Stream A** carries the statistics pass into FWU0.
* **Stream B** carries the output pass into FWU1.

When an output pass starts, each lane copies mu and sigma into FWU1's registers. FWU0 is then free
to start the statistics of the next group of channels while FWU1 is still normalizing the current
one.

## Backward pass: one accumulation pass, one output pass

With `k0 = -gamma/(sigma+eps)` and `k1 = sigma^(-3/2) * gamma * C(B)/2`, the input gradient is:

```
dx_i = k0 * (mean(dy) + dy_i)   +   { +k1 * S   if x_i == xmin
                                    { -k1 * S   if x_i == xmax
                                    {  0        otherwise
S    = sum_i dy_i * (x_i - mu)
```

Each backward lane (`bw_block`, 32 in `bw_module`, all in FP10-B) has three parts:
* **BWU0** (`bwu0`) sums dy during the accumulation pass (stream A). In the output pass
  (stream B) it forms the first term. Output latency is 2 cycles.
* **BWU1** (`bwu1`) accumulates `dy*(x-mu)` in the same accumulation pass, then multiplies by k1.
  It keeps both `+k1*S` and `-k1*S`. A multiplexer chooses between them and 0, based on comparing
  `x` with the stored xmin and xmax.
* **A final adder** adds the two terms. dL/dx is ready 3 cycles after its beat.

Sign conventions:
* The sum S is formed as `dy*(x-mu)`.
* The `+` term goes with xmin and the `-` term with xmax.
* If all elements are equal (xmin = xmax), the xmin case wins.

**Where the statistics come from.** The backward lanes take mu, sigma, xmax and xmin as inputs
(`bw_*`). Between the two passes of a layer the host keeps the forward results. They are converted
from FP10-A to FP10-B on entry.

**The scalar unit** (`scalar_unit`) computes k0 and k1 for one channel at a time. It shares one
adder, one multiplier, one divider and one square-root unit over seven steps:
`t = sigma + eps`, `k0 = -gamma/t`, `r = sqrt(sigma)`, `p = sigma*r`, `q = gamma*C(B)`, `h = q*0.5`,
`k1 = h/p`.
* Latency is 8 cycles per channel, about 260 cycles for all 32 lanes.
* The results go into per-lane registers inside `lightnorm`.

**`cb_lut`** holds C(B) for B = 16, 32, 64, 128, 256 and 1024, in both formats, indexed by
log2(B). Any other code raises `cfg_error`.

## Control (`ln_control`) and the command interface of `lightnorm`

Work is started by commands (`cmd_valid/cmd_ready`, `cmd_op`):

| command | stream | does |
|---|---|---|
| `OP_FW_STAT` | A: x | forward statistics of N beats; `a_done` when mu/sigma/xmax/xmin are valid |
| `OP_FW_NORM` | B: x | y for N beats (4-cycle latency); `b_done` after the N-th y |
| `OP_SCALAR`  | – | k0, k1 of all 32 lanes; `s_done` |
| `OP_BW_ACC`  | A: x, dy | backward sums; `a_done` when the terms are ready |
| `OP_BW_OUT`  | B: x, dy | dL/dx for N beats (3-cycle latency); `b_done` |

There are three independent sequencers: A, B and S. A command is taken when its sequencer is idle,
with one extra rule: an output pass waits until no statistics pass is open. This means it always
loads finished statistics.

An output pass is taken on a clock edge, and the units copy their statistics on that same edge. The
first stream beat may therefore arrive in the next cycle. Beats that arrive while a sequencer is
idle are ignored. Both streams have no back-pressure: the sender must not send more than N beats
per pass.

The streams carry all 32 lanes in one word, and every lane runs in lock step. An assertion in the
modules checks the lock step.

## The accelerator (`lightnorm_accel`)

```
            dram_* port (host / DRAM)
               |            |             ^
             IBUF          WBUF           | OBUF (BFP10 words)
           1024x256       1024x256        |  768x256
               |   FP8       | FP8 rows   |
               v             v            |
           32x32 systolic array (FP8 x FP8 + FP32), weight stationary
               | 32 x FP32, latency 63
               v
     BFP converter FW (FP10-A) / BW (FP10-B) ---> OBUF (stored BFP10)
               | FP10 (unrounded by BFP)
               v
           LightNorm stream A  <--- x read back from OBUF (backward)
           LightNorm stream B  <--- x, dy read back from OBUF
               | y / dL/dx  ---> BFP pack ---> OBUF
```

**Array.** `systolic_array` holds one FP8 weight per cell. Row `r` of the input vector is delayed
`r` cycles so that it meets the partial sum coming down the column. The output columns are
re-aligned, so all 32 sums of a vector leave together `ROWS+COLS-1 = 63` cycles after it entered.
Each column sum is formed in row order, rounded to FP32 after every addition.

**BFP storage.**
* `bfp_pack` finds the largest exponent `es` of four neighbouring lanes.
* It stores each magnitude as the 4-bit (FP10-A) or 3-bit (FP10-B) significand with its hidden
  one, shifted right by `es - e_i` and truncated.
* A word holds 8 groups: 200 of its 256 bits are used for FP10-A and 176 for FP10-B.
* `bfp_unpack` renormalizes each field. Small lanes lose low bits, or become zero, when they share a
  group with a much larger one. This loss is deliberate and is what the testbench checks for.

**Commands** (`accel_cmd_t`, on `acmd_valid/acmd_ready`; `acmd_done` pulses at the end of each):

| command | reads | writes | LightNorm |
|---|---|---|---|
| `AC_LOAD_W`  | WBUF[src..src+31] | array weights | – |
| `AC_GEMM_FW` | IBUF[src+k] | OBUF[dst+k] = BFP10-A x | stream A of a forward statistics pass |
| `AC_GEMM_BW` | IBUF[src+k], OBUF[src2+k] (x) | OBUF[dst+k] = BFP10-B dy | stream A of a backward accumulation pass |
| `AC_NORM_FW` | OBUF[src+k] | OBUF[dst+k] = BFP10-A y | stream B |
| `AC_NORM_BW` | OBUF[src+k], OBUF[src2+k] | OBUF[dst+k] = BFP10-B dL/dx | stream B, two OBUF reads per beat |
| `AC_SCALAR`  | – | – | k0/k1 |

* **Starting and spanning passes.** A command with `ln_start` set also starts the matching
  LightNorm pass of `ln_n_elems` beats. A command without it continues the open pass. A channel can
  therefore hold more elements than one buffer, or one command.
* **Stream A versus stored data.** In the forward GEMM, stream A sees the FP10 values before BFP truncation; in the backward GEMM, only dy is unrounded and x comes from the OBUF. The output
  passes read the stored, truncated values back.
* **Buffer access.** The host may touch the buffers only while the sequencer is idle; an assertion
  checks this.
* **DRAM.** The DRAM itself (an LPDDR3 device) is outside the design. Its side of the buffers is the
  `dram_*` port.

## Parameters and sizes

| parameter | default | where |
|---|---|---|
| `LANES` | 32 | lanes of LightNorm, columns of the array |
| `ROWS`, `COLS` | 32, 32 | systolic array |
| `GROUP` | 4 | lanes per shared exponent |
| `BUS` | 256 | buffer word width |
| `IBUF_DEPTH`, `WBUF_DEPTH`, `OBUF_DEPTH` | 1024, 1024, 768 | 32 KB, 32 KB, 24 KB |
| `CW` | 24 | element counter width; N up to 2^24 - 1 |

**Limits to know before use.**
* The host supplies 1/N in FP10-A. The smallest FP10-A value is 2^-14, so `mu` is only right for
  N ≤ 16384.
* Larger channels, such as a 256-image batch of 32×32 maps with N = 262,144, need the mean
  scaled outside, or 1/N applied in two factors. The RTL does not do either.
* Accumulating hundreds of thousands of values in a 4-bit-fraction adder also stagnates once the
  sum is large. That is a property of the number format rather than of this RTL.

## Where this RTL departs from, or adds to, the published design

* **Follows the published design:**
  * the range-normalization equations and the backward equations;
  * the FP10-A/FP10-B split and BFP with groups of four and the largest exponent;
  * 32 lanes, each an FWU0/FWU1 or BWU0/BWU1 pair;
  * a scalar unit computing k0 and k1, and the six-entry C(B) table;
  * the 32×32 FP8/FP32 array;
  * the buffer sizes and the 256-bit bus.
* **This design's own choices** (the published text is silent on them):
  * the rounding and zero/overflow rules;
  * all latencies;
  * the two-stream organization and the copying of statistics into use registers;
  * the control unit's command set;
  * the zero input of the BWU1 multiplexer;
  * how 1/N and eps are supplied;
  * the FP10-A→FP10-B conversion of the stored statistics;
  * the BFP field layout and truncation;
  * the weight-stationary dataflow of the array;
  * the accelerator's sequencer and buffer addressing.
* **Not built:** the external DRAM device.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. `tb/fp_ref_pkg.sv` models the number
formats in `real` arithmetic. `tb/ln_ref_pkg.sv` is a bit-exact reference of every LightNorm
equation, in the same operation order as the hardware. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/lightnorm_pkg.sv tb/fp_ref_pkg.sv tb/ln_ref_pkg.sv tb/tb_lightnorm_accel.sv \
    --top-module tb_lightnorm_accel -Mdir obj
./obj/Vtb_lightnorm_accel
```

Replace the testbench name to run another one.

**`tb_lightnorm_accel`** runs the accelerator at its default size through one layer's training
step:
* It loads weights and runs two forward GEMMs that form one statistics pass.
* It normalizes that group while the next group's statistics pass runs.
* It runs the scalar step, two backward GEMMs and two dL/dx commands.
* It checks every stored word against the reference model.
* It counts the mechanisms the run must show: command stall, overlapping passes, a pass spanning
  commands, the forward-to-backward switch, two OBUF reads per beat, BFP truncation and the
  xmin/xmax term. A mechanism that never occurs counts as a failure.

**`tb_lightnorm`** does the same directly on the LightNorm block.

Building the full accelerator takes about two minutes. The simulation itself takes seconds.
