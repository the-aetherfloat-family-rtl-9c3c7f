# AetherFloat MAC vector in SystemVerilog

AetherFloat is a family of floating-point formats for AI accelerators. It makes
three changes to IEEE-style floats, each meant to make the hardware cheaper:

* **Base-4 exponent.** An exponent step multiplies by 4, not 2. Operands are
  therefore aligned in whole 2-bit digits, and the alignment shifter of an adder
  shrinks to a 2-stage multiplexer. The same exponent width also covers a much
  wider range. That is what lets the 8-bit member go without per-block
  scaling hardware.
* **Explicit mantissa.** There is no hidden leading 1. The 8-bit member (AF8) has
  a 3-bit mantissa, so its multiplier is a 3x3 partial-product array instead
  of the 4x4 that FP8 E4M3 needs. Subnormals use the same datapath as normal
  numbers, and there are no traps.
* **One's-complement sign.** A negative number stores its magnitude bits
  inverted. The whole code then orders like a signed integer. ReLU, max,
  max-pooling and NaN filtering can run on plain integer comparators.

This repository holds synthesizable RTL for these ideas at the level of one
SIMD vector. The vector has 16 multiply-accumulate (MAC) lanes working in lock
step. The lanes share one 32-bit LFSR that supplies random bits for stochastic
rounding, and an integer-only ALU works directly on the codes. The default
format is AF8. The same RTL builds an AF16 vector when its parameters are set.

## 1. The number format

A code is an N-bit signed integer with the fields `S | E (EW bits) | M (MW bits)`.

| format | N | EW | bias | MW | mantissa scale | largest finite | smallest non-zero |
|---|---|---|---|---|---|---|---|
| AF8  | 8  | 4 | 7  | 3 | M / 2  | 3.5 x 4^7 = 57 344 | 2^-13 ~ 1.22e-4 |
| AF16 | 16 | 7 | 63 | 8 | M / 64 | ~3.98 x 4^63 ~ 3.4e38 | 2^-130 |

The radix point of the mantissa sits after its top two bits, so the mantissa
stands for `M / 2^(MW-2)`. Write `U` for the magnitude field `{E, M}`:

* positive code: `U` is stored as is; negative code: `U` is stored inverted.
  As an integer, a negative code equals `-1 - U`.
* `E > 0`: the value is `(-1)^S * M/2^(MW-2) * 4^(E-bias)`, and the top 2 bits
  of `M` (the leading pair) must be non-zero.
* `E = 0`: the value is the same formula with `E` read as 1. The leading pair is
  00, so AF8 has exactly one non-zero subnormal, `M = 1`, worth `2^-13`.
  Reading `E = 0` as `E = 1` is the whole subnormal mechanism: it is one OR gate
  (`e_eff = E | (E == 0)`), with no branch and no extra multiplexer.
* `M = 0` is zero, whatever `E` is. `+0` is all zeros. `-0` is all ones, which
  is `-1` as an integer and sorts just below `+0`.
* `E` all ones is reserved. With `M` all ones the code is NaN, so `-NaN` is
  the most negative integer (AF16: `0x8000` = -32768) and `+NaN` the most
  positive. Any other `M` is Inf, produced as `M = 0`. Infinities therefore sort
  just inside the NaNs, and every finite value lies between them.

Codes that break the leading-pair rule are *non-canonical*: a zero leading pair
with `E > 0`, or a non-zero leading pair with `E = 0`. They repeat values that
have a canonical code, and they break the integer ordering. `af_unpack` flags
them, and the arithmetic still takes them at their formula value. Every result
the MAC produces is canonical.

Examples (AF8): `0x3a` = +1.0 (E=7, M=2). `0xc5` = -1.0. `0x77` = 57344.
`0x78` = +Inf. `0x7f` = +NaN. `0x01` = 2^-13.

## 2. One MAC lane: `af_fma` inside `af_mac`

Each lane computes `acc <- round(acc + a*b)` once per enabled cycle. All three
operands and the accumulator are in the lane's format. The combinational
datapath `af_fma` runs in five steps:

```
 a,b,c codes
   |  af_unpack x3      one XOR row per operand strips the sign inversion
   v
 Ma*Mb, Ea'+Eb'-bias   af_mul: MW x MW AND-array, exponent add (E' = max(E,1))
   |
   v
 product normalise      shift left by whole digits until its top digit is non-zero
   |
   v
 align smaller addend   af_align: ALIGN_STAGES-stage digit mux (default 2: 0..3 digits);
                        farther -> sticky only
   |
   v
 add / subtract         sign-magnitude in a 4+FW bit word (AF8: FW = 20)
   |
   v
 af_round               leading digit, exponent clamp at 1, RNE or stochastic, Inf/NaN, af_pack
```

`af_mac` registers the result. The accumulator changes on the clock edge that
takes the operands, so the sum shows one cycle later. `clr` starts a new sum:
with `en` it loads `+0 + a*b`, alone it loads `+0`.

### Alignment window and exactly what "rounded" means

This is the part to understand before changing the datapath.

Both addends are placed in one fixed-point word, with two integer digits and FW
fraction bits. The product, after its left shift, and a canonical accumulator
both lie in [1,4) x 4^e. The addend with the larger exponent goes in unshifted.
The other moves right by the exponent difference `d`, counted in base-4 digits.
Write R = 2^ALIGN_STAGES for the aligner's reach (R = 4 by default):

* **d < R.** Stage k of the multiplexer shifts by 2^k digits: with the default
  2 stages, by 1 digit and then by 2 digits. FW is large enough that no bit
  falls off, so the sum is exact. Both rounding modes then give the correctly
  rounded value of the exact `c + a*b`.
* **d >= R.** The smaller addend becomes one sticky bit. That bit sits in the
  word's lowest position, which no operand bit ever reaches, and it is added or
  subtracted with the addend's sign. In effect the small addend becomes
  "plus or minus epsilon". Round-to-nearest-even is still exact, because the
  small addend is below a quarter of the result's last place, so only its
  sticky bit can matter. Stochastic rounding sees only the larger addend's
  fraction. An update R or more digits (with R = 4, a factor of 256 or more)
  smaller than the accumulator is therefore never rounded up into it.

`ALIGN_STAGES` trades this off. The default 2 stages are the shallow
multiplexer the format is meant to allow, and they are exact for nearest-even.
For stochastic rounding to see every update that could move the sum, the reach
must pass the SR fraction bits as well: R >= (MW + SR + 3) / 2. That is 3
stages for AF8 and 4 for AF16 with SR = 8. In an AF16 vector with 2 stages,
updates 4 digits below the accumulator are still below its last place, so
they are lost in both modes. `tb_sr_accumulation` shows this side by side.

FW is `(2*MW-2) + 2*(R-1) + SR + 2`, rounded up to even. For default AF8 this is
20 bits with SR = 8 (AF16 with 4 stages: 54).
It holds an (R-1)-digit shift of the widest addend with nothing lost. It also keeps
every bit that rounding inspects at a fixed distance above the sticky position
after normalisation. The reference models in `tb/` define the same semantics
without the word layout: an exact integer sum, with the far addend replaced by
±1 in a unit far below every quantum. The datapath matches them on every AF8
input combination tried, all 65 536 (a, b) pairs among them. It also matches on
random AF16 codes, non-canonical ones included.

### Rounding modes

`mode` is `af_pkg::rnd_mode_e`:

* `RND_NEAREST_EVEN`: the deterministic mode, used for inference and for the
  forward pass of quantization-aware training.
* `RND_STOCHASTIC`: the SR bits just under the last mantissa bit are added to the
  SR-bit random word `rnd`, and a carry out rounds up. A result whose fraction
  is f (in units of 2^-SR of the last place) thus rounds up with probability
  f / 2^SR. A result that is exactly representable never moves.

After rounding, a mantissa that overflows past all ones moves up one digit
(`M = 2^(MW-2)`, exponent + 1). An exponent that reaches the reserved value gives
±Inf. When the exponent would fall below 1 it is held at 1 and the mantissa is
taken at that scale. This is the subnormal rule, and a result with a zero
leading pair is stored with `E = 0`.

### Exceptions and zeros

A NaN operand, Inf x 0, or Inf - Inf (an Inf product plus an Inf accumulator
of opposite sign) gives +NaN. Otherwise an Inf product or an Inf accumulator
gives Inf. An exact zero sum is +0, except that two negative addends
(e.g. `-0 + (-x * 0)`) give -0. A non-zero result that rounds to zero keeps its
sign. The status outputs are `inexact`, `rounded_up`, `overflow` (became Inf),
`subnormal` and `far_align` (d >= R). They are registered along with the
accumulator.

## 3. Shared stochastic rounding: `sr_lfsr`

A random-number generator in every lane would cost more than the AF8 MAC
itself. Instead, one 32-bit Galois LFSR serves the whole vector. Its low SR
bits go to all 16 lanes at once, so lanes that round in the same cycle see the
same random word. The LFSR is right-shifting with feedback mask `0x80200003`
(polynomial x^32 + x^22 + x^2 + x + 1, maximal length). It steps once for every
MAC cycle in stochastic mode and holds in nearest-even mode. It can be loaded
with a seed, and a zero seed is replaced by the default seed because the
all-zero state would lock up.

## 4. Integer bypass ALU: `af_int_alu`

Because the codes sort as signed integers, each lane of this ALU is just a
signed comparator and a multiplexer. It finishes in the same cycle as its
inputs (combinational):

| `alu_op` | result per lane |
|---|---|
| `ALU_MAX` / `ALU_MIN` | the larger / smaller code |
| `ALU_RELU` | `a` if `a > 0` as an integer, else +0 (so -0 also becomes +0) |
| `ALU_NANFILT` | `a` if strictly between the two NaN codes, else +0 |
| `ALU_GT` | 1 if `a > b`, else 0 |

`pool_max` is the largest `a` across all lanes. It is a max-pool whose window
is the whole vector.

## 5. The vector: `af_vector_unit` (top)

Parameters: `LANES = 16` (one LFSR per 16 MACs), `SR = 8`, the format
`EW/MW/BIAS` (default AF8 `4/3/7`; AF16 is `7/8/63`) and `ALIGN_STAGES = 2`.
For AF16 gradient accumulation with stochastic rounding, use
`ALIGN_STAGES = 4` (see section 2).

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (accumulators +0, LFSR to seed) |
| `mac_en`, `acc_clr` | in | 1 | accumulate / start new sums, all lanes |
| `rnd_mode` | in | `rnd_mode_e` | nearest-even or stochastic |
| `a`, `b` | in | LANES x N | operands |
| `acc` | out | LANES x N | accumulators, valid one cycle after `mac_en` |
| `inexact`, `rounded_up`, `overflow`, `subnormal`, `far_align` | out | LANES | flags of the last operation |
| `lfsr_load`, `lfsr_seed`, `lfsr_state` | in/in/out | 1/32/32 | seed loading, LFSR state |
| `alu_op`, `alu_src_acc` | in | `alu_op_e`, 1 | ALU operation; take `acc` instead of `alu_a` as operand a |
| `alu_a`, `alu_b`, `alu_y` | in/in/out | LANES x N | ALU operands and result (combinational) |
| `pool_max` | out | N | maximum over the lanes of operand a |

Typical use: for a dot product, assert `acc_clr` together with `mac_en` on the
first element. Then keep `mac_en` asserted. Read `acc` one cycle after the last
element, or apply `ALU_RELU` with `alu_src_acc = 1`. For gradient accumulation,
switch `rnd_mode` to stochastic.

Size after generic synthesis, for the default AF8 top: about 4 700 word-level
cells and 240 flip-flops (16 x 13 lane bits, plus 32 LFSR bits). One MAC lane is
about 270 cells.

## 6. Files

| file | contents |
|---|---|
| `rtl/af_pkg.sv` | format constants, `rnd_mode_e`, `alu_op_e` |
| `rtl/af_unpack.sv`, `rtl/af_pack.sv` | code to fields and back |
| `rtl/af_mul.sv` | explicit-mantissa array multiplier and exponent add |
| `rtl/af_align.sv` | base-4 alignment multiplexer (2 stages by default) |
| `rtl/af_round.sv` | normalise, round, encode |
| `rtl/af_fma.sv` | combinational fused multiply-add |
| `rtl/af_mac.sv` | one MAC lane with accumulator register |
| `rtl/sr_lfsr.sv` | shared 32-bit Galois LFSR |
| `rtl/af_int_alu.sv` | integer-only ALU |
| `rtl/af_vector_unit.sv` | top: LANES MACs + LFSR + ALU |
| `tb/af8_ref_pkg.sv` | exact AF8 reference (128-bit integer arithmetic) |
| `tb/af_ref_pkg.sv` | exact reference for any format (640-bit integers) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_af16_vector_unit`, `tb_sr_accumulation` and `tb_sort_workload` |

## 7. Verification and how to simulate

Each testbench compares the hardware with values computed independently. Each
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.

* `tb_af_unpack` checks all AF8 codes and random AF16 codes. It also checks
  that, for canonical codes, integer order equals value order for every pair.
* `tb_af_pack`, `tb_af_mul` (all AF8 inputs), `tb_af_align` and `tb_af_round`
  check the submodules on their own.
* `tb_af_fma` runs directed cases, all 65 536 (a, b) pairs with random
  accumulators in both modes, and 200 000 random triples. It checks a 2-stage
  and a 3-stage instance on every input.
* `tb_af_mac` runs 20 000 cycles of random clr/en/mode traffic against a cycle
  model, which also checks the one-cycle latency.
* `tb_sr_lfsr` checks the output bit stream against the polynomial's
  recurrence.
* `tb_af_vector_unit` is the end-to-end test of the default (AF8, 16-lane)
  unit. It runs dot products, ReLU, NaN filtering and max-pooling on the
  accumulators. It then applies small updates that vanish under nearest-even
  and move under stochastic rounding, followed by overflow, NaN and subnormal
  cases and random traffic. It counts each of these events and fails if one
  never happens.
* `tb_af16_vector_unit` runs the same kinds of test on an AF16 build with a
  4-stage aligner.
* `tb_sr_accumulation` is the vanishing-update experiment, run on AF16
  vectors. Each lane starts at 1.0 and adds 512 updates of about 2^-9, well
  under half a last place (2^-7). This is repeated with 4 LFSR seeds.
  * Nearest-even stalls at 1.0.
  * Stochastic rounding with the one shared LFSR and 4 stages ends within 1%
    of the exact mean. A software SR that draws an independent random word
    per lane and step does no better. So one generator per 16 lanes loses
    nothing here.
  * The default 2-stage aligner also stalls, because the updates lie 5
    digits below the sum.
* `tb_sort_workload` merge-sorts 1 000 012 random AF16 codes. Specials,
  subnormals and both zeros are included. The only comparator is an
  `af_int_alu` lane doing a signed integer compare of the raw codes, so no
  decoding is involved. The result is then checked pairwise by real value:
  there are no monotonicity errors, and it is a permutation of the input.

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/af_pkg.sv tb/af8_ref_pkg.sv tb/tb_af_vector_unit.sv --top-module tb_af_vector_unit
./obj_dir/Vtb_af_vector_unit
```

Use `tb/af_ref_pkg.sv` instead of `tb/af8_ref_pkg.sv` for `tb_af16_vector_unit`
and `tb_sr_accumulation`; `tb_sort_workload` needs neither. Every testbench
runs in a few seconds at most.

## 8. What follows the source design and what is this implementation's choice

Taken from the format's definition: the field widths, biases and value rules of
AF8 and AF16. Also the one's-complement encoding and its XOR-row unpack, the
`E = 0 -> 1` subnormal rule and one-step underflow, and the reserved maximum
exponent with -NaN at the bottom of the integer range. The hardware structure
comes from there too: the 3x3 explicit partial-product array, alignment in
2-bit digits through a 2-stage multiplexer, stochastic rounding from one
32-bit Galois LFSR per 16 MACs with a deterministic mode for inference, and
ReLU / max-pooling / NaN filtering on integer comparators.

Chosen here, where the source is silent:

* The accumulator is in the operand format, and each step is fused and rounds
  once. An accumulator wider than the operands would also fit the description.
* The flush rule for addends R or more digits apart, with its effect on
  stochastic rounding (section 2). Also the option of a deeper aligner
  (`ALIGN_STAGES`) for stochastic rounding of small AF16 updates.
* Round-to-nearest-even as the deterministic mode. SR = 8 random bits per
  rounding, taken from the low LFSR bits. The polynomial and the seed.
* Inf encoding (reserved exponent, any mantissa but all ones), overflow to Inf,
  the NaN/Inf propagation rules and the sign of zero results.
* The pipeline: one cycle per MAC, results one cycle later, asynchronous reset.
* The product normaliser ahead of the aligner. The source names no normaliser.
* The top-level vector, the ALU coupling to the accumulators and every port name.

Not built:

* **Hybrid block exponent.** The source mentions, as an option only, sharing
  the base-4 exponent across a memory block.
* **Exception traps.** The reserved exponent is called an exception "trap", but
  nothing is said about how a pipeline would take that trap. Here NaN/Inf are
  simply produced as codes, with flags.
* **Converters.** Nothing converts to or from IEEE formats, and there is no
  quantizer. The source does this in software.
* **Everything outside a vector.** There is no memory, no sequencer and no host
  interface, so models such as a 7B-parameter LLM cannot be held or run on this
  unit alone.
* **Power, area and delay.** The source's figures (a 130 nm standard-cell flow)
  cannot be compared directly with this RTL, whose accumulator and pipeline
  choices are its own.
