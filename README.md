# Dual-accumulator MAC units for Markov Greedy Summation (MGS)

A dot product of low-precision numbers is usually accumulated in a register far
wider than the products, because *some* partial sum *might* overflow. In practice
the running sum of products of zero-centred weights and activations behaves like
a random walk: it stays small for many steps, and only occasionally leaves the
range of a narrow register. Markov Greedy Summation exploits this. It adds
products into a **narrow** accumulator for as long as that works, and only when
an addition would overflow does it move the narrow value into a **wide**
accumulator and restart the narrow one. The wide adder thus runs only rarely. No
reordering, retraining or clipping is needed, and the result is exact.

This repository holds synthesizable SystemVerilog for two hardware units built on
that idea, called dMACs (dual-accumulator multiply-accumulate units):

* **`int_dmac`**: an integer dMAC. 4-bit signed weights and activations, an
  8-bit narrow accumulator and a 32-bit wide accumulator.
* **`fp8_dmac`**: an FP8 (E4M3) dMAC. It keeps 16 five-bit narrow
  accumulators, one per product exponent, and a single 32-bit fixed-point wide
  accumulator. It returns the dot product as an IEEE binary32 number, and it can
  skip operand pairs whose product is certain to round to zero ("subnormal
  gating").

`mgs_dmac_top` puts one of each side by side. The two units are independent
and share only the clock and reset.

## 1. The integer dMAC

```
 weight ─┐
         ├─ × ─► p ──┬──────────────► a8 mux (1: p, 0: a8+p) ─► a8
 act ────┘           └─► 8-bit adder (a8 + p) ── oflow
                                                   │
                 oflow | done ─► wide-input mux (1: a8, 0: 0) ─► 32-bit adder (+a32) ─► a32
                                                                          │
                 done ─────────────────────────────► out mux (1: a32+a8, 0: 0) ─► out
```

Each cycle the product `p` of the previous cycle's pair is added into `a8`. If
the 8-bit signed addition overflows, the sum is thrown away. The old `a8` goes
through the wide adder into `a32`, and `p` is loaded into `a8`. Nothing is lost,
because `p` always fits in `a8` (the module refuses to elaborate if
`NARROW < W_BITS + A_BITS`). The wide register is written only on an overflow or
at the end of a dot product. That write enable is the condition under which its
clock can be gated.

**Timing.** A pair is sampled with `in_valid`. `done` is raised for one cycle
*after* the last pair of a dot product. That same cycle may already carry the
first pair of the next dot product. Two rising edges after `done` is sampled,
`out_valid` is high for one cycle and `out = a32 + a8`; at all other times
`out` is 0. Both accumulators restart in that cycle, so dot products can follow
back to back at one pair per clock. `oflow` pulses once for every spill into the
wide accumulator. Counting it gives the overflow rate that the MGS analysis
predicts.

## 2. The FP8 dMAC

This is the less obvious of the two designs, and the rest of this section
explains it step by step.

### 2.1 Why floating-point accumulation swamps, and how per-exponent registers avoid it

Take two E4M3 numbers (1 sign bit, 4 exponent bits with bias 7, 3 mantissa bits)
with different exponents. Before they can be added, the smaller significand must
be shifted right to the larger exponent. With a 4-bit significand, a difference
of 4 in the exponents shifts the smaller operand out completely. For example,
−0.25 + −0.0293 evaluates to −0.25 instead of −0.28125. Over a long dot product
this "swamping" destroys the result unless a wide (FP16/FP32) accumulator is used.

The FP8 dMAC never adds significands of different exponents in the narrow domain:

1. **Multiply and round to FP8** (`fp8_mul`). The product of two E4M3 values
   is rounded back to E4M3, giving a sign, a 4-bit exponent field `E` and a
   4-bit significand `{hidden, mmm}`.
2. **Sign-convert.** The sign turns the significand into a 5-bit two's-complement
   mantissa in [−15, 15].
3. **Exponent demultiplexing** (`exp_acc_bank`). `E` selects one of 16 five-bit
   registers, and one shared 5-bit adder adds the mantissa into it. Every value
   in register `E` has the same weight, so no alignment shift is needed and
   nothing is swamped.
4. **Spill on overflow** (`shift_wide_acc`). If the 5-bit addition overflows,
   the register's old value is shifted left by its exponent and added into the
   32-bit wide accumulator, and the new mantissa replaces it. This happens in the
   same cycle, so accumulation never stalls.
5. **Flush** at the end of the dot product. The 16 registers are shifted and
   added into the wide accumulator one per cycle. The same shifter and wide
   adder do this work, so the costly alignment happens 16 times per dot product
   instead of once per product.
6. **Normalize and round** (`fixed_to_fp32`). The wide sum is rounded to
   binary32 and returned.

### 2.2 The fixed-point grid of the wide accumulator

An E4M3 significand `s = {h,mmm}` read as an integer 0…15 has the value
`s · 2^(E−10)` when `E ≥ 1`, and `s · 2^(1−10)` for a subnormal (`E = 0`,
`h = 0`). If the wide accumulator is a two's-complement integer whose least
significant bit weighs 2^−10, then a narrow register of exponent `E` lands on the
grid after a left shift by `E`, or by 1 when `E = 0`. The function
`mgs_pkg::fp8_shift_amount` computes this shift. Because the shift is exact, the
wide sum is the **exact** sum of the rounded products. The only rounding after
the multiplier is the final one to binary32.

The largest product magnitude, 448, is 458 752 on this grid. A 32-bit
accumulator can therefore absorb at least 2^31 / 458 752 ≈ 4681 maximal
products before it could wrap. That covers the longest dot products of the
networks this scheme targets (a few thousand terms). The wide sum wraps if it
overflows. No saturation is added.

### 2.3 Product rounding

`fp8_mul` multiplies the two 4-bit significands into an 8-bit integer `prod`.
The exact product is `prod · 2^(E_a' + E_b' − 20)`, where `E' = max(E,1)`. The
leading one of `prod` gives the result exponent. The multiplier shifts `prod`
right until either 4 significant bits remain (normal result) or the grid is
2^−9 (subnormal result), and rounds the dropped bits to nearest, ties to even.
A carry out of the rounding increments the exponent. Two boundary rules
complete it:

* A product whose magnitude is **below 2^−9**, the smallest E4M3 subnormal,
  becomes 0. Strict round-to-nearest would round [2^−10, 2^−9) up to 2^−9. This
  design uses the flush rule so that gating such products (below) changes no
  result.
* A product above 448 **saturates** to ±448. NaN operands (S.1111.111) are not
  supported.

### 2.4 Subnormal gating

`fp8_skip_check` looks at the two operands and flags a pair whose product must
become 0. For such a pair the product register is not loaded and the narrow
bank is left idle, which saves dynamic power. The test is exact for an
exponent-only check. The largest magnitude with exponent field `E` is
`15·2^(E−10)` for `E ≥ 1` and `7·2^−9` for `E = 0`. With
`E' = max(E_a,1) + max(E_b,1)`, the largest product lies below 2^−9 exactly when:

| operands            | largest product   | skip when |
|---------------------|-------------------|-----------|
| both normal         | 225 · 2^(E'−20)   | E' ≤ 3    |
| one subnormal       | 105 · 2^(E'−20)   | E' ≤ 4    |
| both subnormal      | 49 · 2^−18        | always    |

A zero operand is also skipped. Because skipped products are exactly the ones
the multiplier would return as 0, the `SKIP_EN = 0` and `SKIP_EN = 1` builds
give identical results. The testbench checks this.

### 2.5 Controller and timing

| state    | cycles | work |
|----------|--------|------|
| ST_ACC   | one per pair | pair taken (multiply stage); previous product accumulated (narrow stage); spill on overflow |
| ST_FLUSH | 16     | register *i* shifted and added into the wide accumulator, then cleared |
| ST_NORM  | 1      | binary32 result registered, wide accumulator cleared |

The input is a valid/ready port with a `in_last` flag on the final pair. A pair
is taken on a rising edge with `in_valid && in_ready`. `in_ready` falls in the
cycle after the last pair is taken and rises again in the cycle in which
`out_valid` is high. While it is low, a new dot product stalls. `out_valid`
comes **18 rising edges** after the edge that took the last pair:

* 1 edge: narrow stage;
* 16 edges: flush;
* 1 edge: normalize.

The unit also has two status pulses. `oflow` marks a narrow overflow; `skipped`
marks a gated pair.

## 3. Files

| file | contents |
|------|----------|
| `rtl/mgs_pkg.sv` | E4M3 struct, fixed-point constant, shift function, bank-op and FSM enums |
| `rtl/int_dmac.sv` | integer dMAC |
| `rtl/fp8_mul.sv` | E4M3 multiplier with rounding to E4M3 |
| `rtl/fp8_skip_check.sv` | subnormal gating test |
| `rtl/exp_acc_bank.sv` | 16 narrow registers and the shared 5-bit adder |
| `rtl/shift_wide_acc.sv` | left shifter and 32-bit wide accumulator |
| `rtl/fixed_to_fp32.sv` | normalize and round to binary32 |
| `rtl/fp8_dmac.sv` | FP8 dMAC: pipeline, controller, flush |
| `rtl/mgs_dmac_top.sv` | both units under one top |
| `tb/tb_fp8_ref_pkg.sv` | real-number reference arithmetic used by the FP8 testbenches |
| `tb/tb_<block>.sv` | one self-checking testbench per module |

## 4. Parameters

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| `int_dmac` | `W_BITS`, `A_BITS` | 4, 4 | signed operand widths |
| | `NARROW`, `WIDE` | 8, 32 | accumulator widths (`NARROW ≥ W_BITS + A_BITS`) |
| `fp8_dmac` | `NARROW` | 5 | narrow register width (≥ 5) |
| | `WIDE` | 32 | wide accumulator width |
| | `N_EXP` | 16 | number of exponent registers (must be 16 for E4M3) |
| | `SKIP_EN` | 1 | subnormal gating on/off |

All defaults are the sizes the MGS design uses. The integer unit can be
re-parameterized for the 5-to-8-bit operand sweeps used to evaluate MGS, as long
as the narrow accumulator is at least as wide as a product. Narrow accumulators
*narrower* than a product, which the statistical analysis of MGS also considers,
are not supported. That would require splitting a product across the two
accumulators.

## 5. How closely this follows the published design

These points come straight from the MGS design:

* the integer datapath: product register, 8-bit narrow and 32-bit wide adders,
  spill of `a8` on overflow with `p` written into `a8`, the result `a8 + a32` at
  the end, and the 0 output otherwise;
* E4M3 multiplication followed by rounding to FP8;
* the 5-bit signed mantissa and the 16 exponent-indexed registers with one
  narrow adder;
* the left shift by the exponent into one 32-bit accumulator on overflow;
* the 16× shift+add once per dot product;
* the final normalize+round to FP32;
* skipping of pairs whose product is below 2^−9, decided from the exponents;
* gating of the wide accumulator when it is idle.

These are choices of this implementation:

* signed operands, with two's-complement overflow detection instead of a plain
  carry-out;
* all handshakes (`done` one cycle after the last pair; valid/ready with a
  `last` flag) and every latency;
* round-to-nearest-even everywhere, saturation at 448, and no NaN handling;
* the flush rule for products below 2^−9, and the zero-operand skip;
* the 2^−10 fixed-point grid, and the shift by 1 for subnormals;
* one flush step per cycle, with the input stalled during the flush;
* synchronous active-low reset, and wraparound of the wide accumulators;
* clock gating written as a register enable: no gating cell is instantiated;
* the common top.

One published figure could not be reproduced. The design description states
that 1280 of the 32 640 unordered E4M3 operand pairs have a product below 2^−9.
Counting pairs of distinct codes gives 2112 (1603 without a zero operand). The
hardware follows the 2^−9 rule, not the count.

## 6. Verification

Every module has a self-checking testbench that computes its expected values
independently of the RTL. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_int_dmac`: 300 random dot products, including runs designed to
  overflow and back-to-back dot products. It checks each result, the 2-cycle
  latency, the zero output while idle, and the number of overflows against an
  integer model of an 8-bit accumulator.
* `tb_fp8_mul`, `tb_fp8_skip_check`: exhaustive over all 65 536 operand pairs,
  against a real-number reference. The skip test is also checked for tightness.
* `tb_exp_acc_bank`, `tb_shift_wide_acc`, `tb_fixed_to_fp32`: random
  operation streams plus edge cases, including rounding ties.
* `tb_fp8_dmac`: 400 dot products from four operand mixes, one of them 1000
  terms long. It runs the skipping and non-skipping builds side by side. It
  checks results against the exactly-summed, binary32-rounded reference, the
  18-cycle latency, that both builds agree, and the overflow and skip counts
  against reference models.
* `tb_mgs_dmac_top`: the top at its default parameters, with both units driven
  at once. It checks every result and latency, and requires each mechanism to
  occur at least once: integer overflow, back-to-back integer dot products, FP8
  overflow, gated pair, input stall, subnormal product and saturated product.

* `tb_workload_fp8`: the FP8 dMAC at its defaults on dot products of
  length 1280, 1536 and 4608. These are the longest dot products of
  MobileNetV2, ViT-Small and ResNet-18. Weights are Gaussian; activations are
  half-normal or Gaussian; all are rounded to E4M3. Results must be exact (the
  sum of the rounded products, rounded once to binary32). The testbench also
  compares them with naive FP8 accumulation, which rounds every partial sum to
  E4M3. Over the run the dMAC's error is about 1/30 of the naive error.
  A 5-bit narrow register overflows roughly every 4 sums with such data,
  because a normal E4M3 significand is at least 8.
* `tb_workload_int`: the integer dMAC re-parameterized for 5-bit weights
  (σ = 5) and 7-bit activations (σ = 21) over the same lengths. Two instances
  run the same data, one with a 12-bit and one with a 16-bit narrow
  accumulator. The 12-bit accumulator spills only about once every few hundred
  sums; the 16-bit one never does.

To run a testbench with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Irtl rtl/mgs_pkg.sv \
    tb/tb_fp8_ref_pkg.sv tb/tb_fp8_dmac.sv --top-module tb_fp8_dmac -o sim
./obj_dir/sim
```

For the integer testbench, leave out `tb/tb_fp8_ref_pkg.sv`. Each testbench
finishes in well under a second.

## 7. What is not here

* The 7 nm physical implementation (ASAP7, 0.7 V, 500 MHz) and its
  power/area figures. These come from the layout flow, not from RTL.
* A clock-gating cell. The enable that would drive one is present.
* The software side of MGS: the Markov-chain estimate of the expected number of
  sums before overflow, and the emulation library used to measure network
  accuracy.
