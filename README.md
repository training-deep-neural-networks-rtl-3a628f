# FP8 training core: 8-bit multiplies, 16-bit additions

Training a neural network needs three matrix products per layer (forward,
backward and weight-gradient) and an SGD weight update. This core performs
all of them with 8-bit floating point operands and only 16-bit floating point
additions, where conventional training hardware multiplies in 16 bits and
adds in 32. Two tricks make the narrow additions safe:

* **Chunk-based accumulation.** A long dot product is cut into chunks of 64
  products. Each chunk is summed on its own, and only the 64-times-fewer chunk
  sums are added into the running total. No partial sum then grows so large
  that the next addend falls below its last mantissa bit.
* **Floating point stochastic rounding** in the weight update. A result rounds
  up with a probability equal to the fraction that was cut off. The expected
  value of every update is then exact, even when the update is much smaller
  than one LSB of the weight.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. It was written
from the published description of the training scheme and of a 14 nm test
core. That description fixes the number formats, the rounding rules and the
accumulation algorithm. It does not give the core's micro-architecture, so the
engine organisation, pipelining and interfaces are this design's own choices.
They are listed in [Departures and own choices](#departures-and-own-choices).

## Number formats

| name | sign | exponent | mantissa | bias | used for |
|------|------|----------|----------|------|----------|
| FP8  | 1 | 5 | 2 | 15 | GEMM operands and results: weights, activations, errors, weight gradients |
| FP16 | 1 | 6 | 9 | 31 | GEMM accumulation; every weight-update operation; the master copy of the weights and the momentum |

Encoding, in `rtl/fp8_pkg.sv`:

- A normal number is (-1)^s · 2^(e−bias) · (1 + m/2^M).
- Exponent code 0 is zero. There are no subnormals.
- There is no infinity or NaN. The all-ones exponent is an ordinary number.
- Results too large saturate to the largest magnitude. Results too small
  flush to a signed zero.

FP8 covers 2^-14 … 1.75·2^16. FP16 covers 2^-30 … ≈2^33.

The FP16 format has one more exponent bit than IEEE half precision and one
fewer mantissa bit. The extra range is what the weight update needs.

The product of two FP8 numbers has a 6-bit significand, so it fits the FP16
mantissa exactly. Its exponent also fits FP16, unless the product reaches 2^33
(both operands near the FP8 maximum); then it saturates. Accumulation
therefore starts from exact products, and only additions round.

## Why 16-bit sums fail, and how chunking fixes it

An FP16 adder aligns the smaller operand by shifting it right by the exponent
difference. With a 9-bit mantissa, an addend less than 2^-10 of the running
sum is rounded away completely. This is called *swamping*.

A long dot product of positive-mean terms hits this limit. Adding values
around 1.0 stops at 4096 = 2^12: beyond that point each new term is below
half an LSB. `tb/tb_swamping_workload.sv` shows this on the hardware. It sums
prefixes of one vector of 16,336 FP8 values, uniform with mean 1 and
standard deviation 1, with chunk lengths (CL) from 1 to 256:

| length | exact | CL 1 | CL 2 | CL 4 | CL 8 | CL 16 | CL 32 | CL 64 | CL 128 | CL 256 | CL 1, stochastic |
|---:|---:|---:|---:|---:|---:|---:|---:|---:|---:|---:|---:|
| 16     | 14.4    | 14.4  | 14.4  | 14.4  | 14.4   | 14.4   | 14.4   | 14.4   | 14.4   | 14.4   | 14.4   |
| 4,096  | 3,952   | 3,408 | 3,956 | 3,984 | 3,952  | 3,948  | 3,956  | 3,956  | 3,956  | 3,952  | 3,996  |
| 8,176  | 8,062   | 4,096 | 5,488 | 8,144 | 8,064  | 8,112  | 8,104  | 8,096  | 8,080  | 8,072  | 8,184  |
| 12,256 | 12,168  | 4,096 | 6,872 | 8,768 | 12,160 | 12,192 | 12,208 | 12,176 | 12,192 | 12,160 | 12,640 |
| 16,336 | 16,283  | 4,096 | 8,192 | 9,072 | 16,256 | 16,336 | 16,384 | 16,336 | 16,320 | 16,256 | 16,864 |

All columns except the last round to nearest. With CL = 2 or 4 the chunk
sums are still small enough to swamp, just later. The last column is a
plain FP16 accumulator built from the FP16 adder in stochastic-rounding
mode. It does not stall, but it wanders around the exact sum, by a few
percent at this length. From CL = 8 up, chunking alone stays within 1% of
the exact sum, which is why the GEMMs use it.

Chunks can also be too long: then the inner sum swamps instead.
`tb/tb_chunk_size_workload.sv` runs an 8-lane weight-gradient GEMM with
16,384-long dot products (synthetic FP8 data: ReLU activations against
errors with a small positive mean). It measures the error of the result
relative to the exact one for a range of chunk lengths:

| chunk length | 1 | 4 | 16 | 64 | 256 | 1024 | 16384 |
|---|---:|---:|---:|---:|---:|---:|---:|
| normalised L2 error | 0.096 | 0.053 | 0.0081 | 0.0037 | 0.0014 | 0.0024 | 0.096 |

Both ends reduce to plain accumulation and give identical results. The
best lengths lie between 64 and 256. The design uses 64 (parameter `CL`).

The algorithm each lane implements (CL = 64):

```
sum = 0
for each chunk of CL elements (the last chunk may be shorter):
    sum_ch = 0
    for each element i in the chunk:
        sum_ch = sum_ch + x[i] * y[i]     # FP8 multiply, exact; FP16 add
    sum = sum + sum_ch                    # FP16 add
result = sum (FP16), and sum rounded to FP8
```

## Stochastic rounding

`rtl/fp_round.sv` is the rounding and packing stage that every multiplier,
adder and format converter ends in. It receives a normalised significand
with more bits than the target format. It keeps M of them and discards the
D bits below them.

* **Nearest:** round to nearest, ties to even. The top discarded bit is the
  half bit; the other discarded bits act as sticky.
* **Stochastic:** add D uniformly random bits to the D discarded bits. A
  carry out of that addition adds one LSB to the kept mantissa. The
  probability of a carry is exactly (discarded value) / 2^D, which is the
  fraction of an LSB that was cut off. The error is therefore zero on
  average. Its size scales with the exponent of the result, unlike
  fixed-point stochastic rounding.

How many bits to keep before stochastic rounding is not fixed by the scheme.
The adder keeps 16 bits below the FP16 mantissa (parameter `EXT`), plus a
sticky bit. An update as small as 2^-16 of an LSB still has a chance to move
the result. Bits shifted out further only set the sticky bit. This biases
tiny updates upward by at most 2^-16 of an LSB.

The random bits come from `rtl/lfsr_rng.sv`. It is a 64-bit maximal-length
LFSR (x^64 + x^63 + x^61 + x^60 + 1), stepped 85 times per clock. Each of the
seven rounders of the weight-update unit gets its own slice of fresh bits
every cycle.

## The GEMM engine

```
              x (broadcast)          y[0]           y[7]
                 |                    |      ...     |
   +-------------+--------------------+---------+    |
   | dot_lane 0:  FP8xFP8 -> FP16 product       |  dot_lane 7 ...
   |              FP16 intra-chunk sum register |
   |              closes every 64 products or   |
   |              at in_last                    |
   +--------------------+-----------------------+
                        | chunk sum (FP16), ch_last
   +--------------------v-----------------------+
   | chunk_acc 0: FP16 inter-chunk sum          |
   |              at the last chunk: result in  |
   |              FP16 and rounded to FP8       |
   +--------------------+-----------------------+
                        v
           out_fp16[0], out_fp8[0]   ...   out_fp16[7], out_fp8[7]
```

`gemm_engine` runs LANES = 8 lanes in lock step. Each cycle one element of
the shared vector `x` and one element per lane of `y` enter. After the element
flagged `last`, the engine has produced 8 dot products. A GEMM is run as a
sequence of such passes. The same engine serves all three training GEMMs:

| GEMM | shared stream `x` | lane streams `y[l]` | length |
|---|---|---|---|
| Forward  | one input row of activations | weight columns | layer fan-in |
| Backward | one row of output errors | transposed weight columns | layer fan-out |
| Gradient | one input feature over the minibatch | error of output l over the minibatch | minibatch size |

With `fp16_mode` set, the lanes take full FP16 operands and use an FP16
multiplier (rounded to nearest). This mode is for the layers the scheme keeps
in FP16: the input images of the first layer (FP8 cannot represent all 256
integer pixel levels) and all three GEMMs of the last layer. The FP16 result
is always available, because the last layer's forward output must stay FP16.

Timing:

- One element per cycle, with no stalls.
- The next pass may start in the cycle after `last`.
- A chunk sum leaves the lane one cycle after the element that closes it.
- The result appears two cycles after the `last` element.

GEMM accumulation always rounds to nearest. The scheme pairs chunking with
the GEMMs and stochastic rounding with the weight update.

## The weight-update unit

`axpy_unit` applies SGD with momentum and L2 regularisation, one weight per
cycle. Everything is in FP16, with stochastic rounding after each operation:

```
stage 1  L2-Reg        g  = dW + wd * W          dW: FP8 gradient from the Gradient GEMM
stage 2  Momentum-Acc  v' = mom * v + lr * g
stage 3  Weight-Upd    W' = W - v'               W8' = FP8(W')
```

The FP16 weight `W` is the master copy. The FP8 copy `W8'` is what the GEMMs
read. Memory for weights thus halves twice compared with 32-bit training: the
working copy is 8 bits and the master copy 16 bits.

Results appear three cycles after their inputs. `wd`, `lr`, `mom` and the
rounding mode are registered along with each element, so they may change
from one element to the next. Nearest rounding is selectable for comparison.
With it, an update below half an LSB of the weight is lost.

`tb/tb_weight_update_workload.sv` shows what this means over many steps. It
runs 1000 SGD steps on 16 weights near 1.0, with the smallest FP8 gradient
(2^-14), learning rate 0.1, momentum 0.9 and weight decay 2^-16. The
momentum term settles near 7.5·10^-5, about a thirteenth of half an LSB of
the weight:

| rounding | mean weight change after 1000 steps |
|---|---:|
| exact (real arithmetic) | −0.0755 |
| nearest | 0 (every update lost) |
| stochastic | −0.0765 |

Loss scaling (errors multiplied by 1000 in the backward pass) is a software
convention. It can be folded into `lr` and needs no hardware here.

## Top level: `fp8_train_core`

`fp8_train_core` instantiates the GEMM engine, the weight-update unit and
the random generator. It has no memory. The test core this design follows
has on-core memories and memory-access engines, but their organisation is not
described, so they are left out. Their streams are the top's ports:

| port group | direction | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `gemm_valid`, `gemm_last`, `gemm_fp16_mode`, `gemm_x`, `gemm_y[8]` | in | GEMM operand stream |
| `gemm_out_valid`, `gemm_out_fp16[8]`, `gemm_out_fp8[8]` | out | dot-product results, one pulse per pass |
| `upd_valid`, `upd_w`, `upd_v`, `upd_dw`, `upd_wd`, `upd_lr`, `upd_mom`, `upd_mode` | in | weight-update stream and hyper-parameters |
| `upd_out_valid`, `upd_w_new`, `upd_v_new`, `upd_w8_new` | out | updated FP16 weight and momentum, and the FP8 weight |

Operands are FP16 containers. In FP8 mode only bits 7:0 are used.

Parameters, with their defaults:

- `LANES` = 8: number of lanes; not fixed by the scheme.
- `CL` = 64: chunk length.
- `EXT` = 16: extra adder bits.

At the defaults, the top synthesises to about 2,600 word-level cells and 947
flip-flops.

## Files

| file | contents |
|---|---|
| `rtl/fp8_pkg.sv` | formats, types, rounding-mode enum, FP8→FP16 widening |
| `rtl/fp_round.sv` | nearest / stochastic rounding and packing |
| `rtl/fp_mul.sv` | multiplier, formats as parameters (FP8→FP16, FP16→FP16) |
| `rtl/fp_add.sv` | FP16 adder |
| `rtl/fp_narrow.sv` | FP16 → FP8 rounding |
| `rtl/lfsr_rng.sv` | random bits |
| `rtl/dot_lane.sv` | multiplier and intra-chunk accumulator |
| `rtl/chunk_acc.sv` | inter-chunk accumulator |
| `rtl/gemm_engine.sv` | 8 lanes with their chunk accumulators |
| `rtl/axpy_unit.sv` | three-stage FP16 SGD update |
| `rtl/fp8_train_core.sv` | top |
| `tb/fp_ref_pkg.sv` | reference arithmetic in `real`, shared by the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_chunk_size_workload.sv` | weight-gradient GEMM error against chunk length |
| `tb/tb_weight_update_workload.sv` | 1000 SGD steps with sub-LSB updates, nearest against stochastic rounding |
| `tb/tb_swamping_workload.sv` | swamping experiment: chunk lengths 1 to 256, nearest and stochastic rounding |

## Verification

Every testbench compares against a model written with SystemVerilog `real`
arithmetic and shares no code with the RTL. Each ends by printing
`TB_RESULT checks=N failures=M`. The testbenches check:

- **Converters and multiplier (exhaustive):** all 65,536 FP16→FP8
  conversions and all 65,536 FP8×FP8 products.
- **Adder and FP16 multiplier (random):** operands chosen so that equal
  exponents, cancellation, swamping, zeros, overflow and underflow all occur.
- **Stochastic results:** always one of the two neighbours of the exact
  value. The round-up rate matches the discarded fraction within 4σ. The
  mean of many additions reproduces a swamped addend.
- **Lane, chunk accumulator and engine:** every chunk and result, compared
  with the chunked algorithm above, including exact cycle timing. Vectors are
  shorter than, equal to and longer than a chunk, with and without idle
  cycles, and in both modes.
- **Top (`tb_fp8_train_core`, default parameters):** one training step of a
  200×8 fully connected layer with a minibatch of 130:
  - the forward GEMM in FP8;
  - the gradient GEMM, whose FP8 output feeds the update;
  - part of the backward GEMM in FP8 (errors times transposed weights);
  - a forward GEMM in FP16 mode;
  - 1,600 weight updates, under nearest and stochastic rounding.

  It counts full chunks, short final chunks, FP8 and FP16 dot products,
  nearest and stochastic updates, and stochastic results that differ from
  nearest. It fails if any of these never happens.
- **Workloads:** three more testbenches run the experiments behind the
  design's choices on the hardware, with the results tabulated above:
  swamping against vector length, error against chunk length, and many
  sub-LSB weight updates.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fp8_pkg.sv tb/fp_ref_pkg.sv tb/tb_fp8_train_core.sv \
    --top-module tb_fp8_train_core -o sim
./obj_dir/sim
```

Verilator finds the other modules in `rtl/` by name. Every testbench takes
less than a minute.

## Departures and own choices

Fixed by the scheme and followed:

- the FP8 (1,5,2) and FP16 (1,6,9) field widths;
- FP8 multiplication with FP16 accumulation;
- chunk length 64 for all GEMMs;
- FP16 AXPYs with floating point stochastic rounding, and its probability rule;
- FP16 operands and results for the first-layer input and the last layer;
- an FP8 working copy and an FP16 master copy of the weights.

This design's own choices:

- **Format details:** the exponent bias, no subnormals, no infinity or NaN,
  saturation, and ties-to-even for nearest rounding.
- **Intermediate precision:** 16 extra adder bits with sticky. The scheme
  does not say how many bits to keep before stochastic rounding.
- **Random source:** the LFSR and its bit allocation.
- **Engine organisation:** 8 lanes, a broadcast operand, one chunk
  accumulator per lane, valid/last streams without back-pressure, and a
  latency of 2 cycles.
- **Short final chunk:** a vector whose length is not a multiple of 64 ends
  in a shorter chunk. The scheme's algorithm assumes whole chunks.
- **Rounding modes:** nearest rounding in all GEMM arithmetic and in the
  FP8 rounding of GEMM results.
- **Weight update:** the three-stage pipeline, stochastic rounding also in
  its multiplications, W' = W − v' as the sign convention, and the FP8 copy
  rounded in the update's rounding mode.
- **Weight-update placement:** in the same core as the GEMM engine.

Not built:

- **On-core memories and memory-access engines.** Only their existence is
  known: no capacity, banking or access pattern. Whether a given network
  (0.23 MB to 216 MB of FP8 weights for the networks the scheme was evaluated
  on) fits on chip cannot be judged. Any dot-product length is supported.
- **Energy and area.** The test core's measurements (chunking costs under 5%
  energy for chunks above 64; FP8 engines 2-4× more efficient than FP16)
  cannot be reproduced in RTL simulation.
