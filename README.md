# DSP packing: several low-precision operations in one FPGA DSP slice

An FPGA DSP slice such as the Xilinx DSP48E2 computes `P = B*(A+D) + C + Pin`
with an 18 x 27-bit multiplier, a 27-bit pre-adder and a 48-bit post-adder.
Quantised image-processing and neural-network workloads multiply 3- to 8-bit
numbers, so one such product uses a small corner of the slice. DSP packing
places several small operands side by side in the wide ports, so that one
wide multiplication yields several small products at once, each in its own
bit field of `P`. The same trick works for additions in the 48-bit adder.

This repository holds synthesizable SystemVerilog for the packing schemes of
"DSP-Packing: Squeezing Low-precision Arithmetic into FPGA DSP Blocks"
(Sommer, Özkan, Keszocze, Teich). It covers the generalised packing (INT-N),
the exact and the approximate rounding corrections, MSB-restoring
Overpacking, addition packing, and the accumulation of packed products
across chained slices. Each scheme has self-checking testbenches.
Integer reference models check every result. The published error statistics
are reproduced almost exactly; the differences are listed below.

## 1. The packed outer product

Take an unsigned vector `a` (entries `a_i`) and a signed vector `w`
(entries `w_0`, `w_1`). Give every entry a bit offset. Then

    (sum_i a_i * 2^a_off[i]) * (sum_j w_j * 2^w_off[j])
        = sum_j sum_i  a_i*w_j * 2^(a_off[i] + w_off[j])

So one multiplication gives every product `a_i*w_j`, at offset
`r_off = a_off[i] + w_off[j]`. The products are numbered `n = j*|a| + i`.
With the offsets used here, they lie in increasing bit order.

On the DSP, the `a_i` go to port `B`. They are unsigned, so their fields are
simply laid next to each other, with zeros in between. The `w_j` are signed,
so each one needs sign extension over all the bits above it. Two such
numbers cannot share one port. `w_0` therefore goes to port `A` and
`w_1 << w_off[1]` goes to port `D`, and the pre-adder adds them.
The padding `delta` is the gap between neighbouring result fields, minus
the result width.

| packing | a | w | a_off | w_off | results | delta |
|---|---|---|---|---|---|---|
| INT4 (default `u_int4`) | 2 x 4 bit | 2 x 4 bit | 0, 11 | 0, 22 | 4 x 8 bit at 0, 11, 22, 33 | 3 |
| INT-N dense | 3 x 4 bit | 2 x 3 bit | 0, 7, 14 | 0, 21 | 6 x 7 bit at 0, 7, ..., 35 | 0 |
| Overpacking (default `u_ovp`) | 3 x 4 bit | 2 x 5 bit | 0, 7, 14 | 0, 21 | 6 x 9 bit at 0, 7, ..., 35 | -2 |
| Overpacking, 4 x 4 bit | 2 x 4 bit | 2 x 4 bit | 0, 8+delta | 0, 2(8+delta) | 4 x 8 bit | -1, -2, -3 |

The total result width divided by the 48 bits of `P` is the packing density:
0.67 for INT4, 0.875 for the dense six-product layout and 1.13 for the
overpacked one. A density above 1 is possible only because fields overlap.

Every element may have its own width (`A_WDTH[i]`, `W_WDTH[j]`). Product
`a_i*w_j` then has `A_WDTH[i] + W_WDTH[j]` bits, and the padding is measured
against the width of the lower of two neighbouring results. The port entries
are `A_W`, `W_W` and `R_W = A_W + W_W` bits wide. A narrower element uses
the low bits of its entry. Each result comes back sign-extended to `R_W`
bits.

A positive padding leaves room to accumulate: with `delta` free bits,
`2^delta` packed results can be summed before the fields collide
(section 5).

## 2. Why a packed result comes out one too small, and two corrections

A field is read by taking bits `r_off .. r_off+R-1` of `P`. That is an
arithmetic right shift, which rounds towards minus infinity. If the products
packed below the field add up to a negative number, their sign extension
fills the field's bits with ones. This borrows one from the field, so it
reads `a_i*w_j - 1`. For INT4 that happens to 37.35 % of all results (mean
absolute error 0.37, never more than 1). The lowest product has nothing
below it and is always exact.

**Full correction** (`CORR_FULL`, in `result_extract`). Treat the packed
word as a fixed-point number whose binary point sits just below the field.
The bit right below the point, `P[r_off-1]`, is 1 exactly when the part below
the field is negative (with non-negative padding). Adding that bit to the
field rounds half up and makes every product exact. This costs one small
adder per product above the lowest.

**Approximate correction** (`CORR_APPROX`, in `approx_corr_term`). The borrow
into field `n` happens when product `n-1`, directly below it, is negative.
Because `a` is unsigned, that product's sign is the sign of its `w`. So the
sign bit of that `w` is added at bit `r_off[n]`. For INT4, `w_0`'s sign goes
to bits 11 and 22 and `w_1`'s sign to bit 33. The DSP does the addition
itself, through port `C`, so no logic is added after the DSP. The
correction fails only when the product below is zero although its `w` is
negative (`a = 0`). What remains is an error rate of 2.35 % (MAE 0.02,
largest error 1).

The INT4 unit takes the correction mode with every operation. One stream
may therefore mix uncorrected, approximate and exact products.

## 3. Overpacking and MSB restoration

With negative padding the fields overlap by `K = -delta` bits, and more
products fit in one slice. Examples are six 4 x 5-bit products instead of
four 4 x 4-bit ones, or 6-bit operands where INT4 packing allows 4-bit ones.
The packed word is still a sum. In the overlap, the lowest `K` bits of
product `n+1` are added onto the top `K` bits of product `n`. Two things go
wrong:

* the **top** bits of product `n` are changed by the **low** bits of `n+1`.
  This is a huge error: the mean absolute error is 24 to 46 for 4-bit
  operands;
* the **low** bits of product `n+1` are changed by the top bits of `n`
  (and its sign extension). This is a small error.

MSB restoration (`mr_restore`) removes the first kind and accepts the second.
The low `K` bits of a product depend only on the low `K` bits of its
operands. For `K = 1` the bit is `a[0] & w[0]`. For `K = 2` the second bit
is `(a[0] & w[1]) ^ (a[1] & w[0])`. These are a few gates (`lsb_calc`). The
block forms them for product `n+1` from the operands, and subtracts them
from field `n` at bit `R-K`:

    r_n = field_n - (lsb_K(a_i' * w_j') << (R - K)),     n+1 = j'*|a| + i'

Worked example, `delta = -2`, `a = {10, 3}`, `w = {-7, -4}`: the field of
`a_0*w_0` reads `0111_1010` = 122. The two low bits of `a_1*w_0 = -21` are
`11`. Subtracting `1100_0000` gives `1011_1010` = -70, which is correct.

The operands have to reach the restoration logic together with the
product word. `packed_mult_unit` therefore delays them through the same four
stages as the DSP. The top product has no neighbour above it and is passed
through. The lowest product stays exact. The others keep an error of a few
LSBs: at most 2 for `delta = -2` and at most 4 for `delta = -3`. For `K > 2`,
`lsb_calc` uses a `K x K` multiplication truncated to `K` bits. Its cost
grows quickly with `K`, so one to three overlapping bits is the useful
range.

Restoration only acts where fields actually overlap. It can stay enabled
(`MR_EN = 1`) for any layout. `MR_EN = 0` gives plain Overpacking, which is
there for comparison.

## 4. Addition packing

`add_pack_unit` adds `LANES` pairs of `LANE_W`-bit numbers in one pass
through the 48-bit adder. The lanes are placed side by side. Across a lane
boundary the carry still runs: a carry out of lane `k` adds one to lane
`k+1`. For example, with two 8-bit lanes, `-13 + -15` in the lower lane
carries out, and `9 + 15` in the upper lane reads 25. So the lowest lane
is exact and every other lane is at most 1 too large. A guard bit is held
at zero in both operands between two lanes. It catches that carry, and the
upper lane then reads 24. Both two's complement and unsigned lanes work,
since each lane is read modulo `2^LANE_W`.

The default is five 9-bit lanes without guard bits (45 of 48 bits). With
`N_GUARD = 3`, guard bits fill the three lowest boundaries and the 48 bits
exactly, and only the top lane is approximate. Lanes may also differ in
width (`LANE_WDTH`). For example, two 9-bit and three 10-bit lanes fill all
48 bits without guard bits. A narrower lane returns its sum zero-extended.
`guard_carry` reports the carry each guard bit caught. On the slice, `x` drives port `C` and `y` the
cascade input, and the multiplier operands are zero. So the unit uses only
`P = B*(A+D) + C + Pin`.

## 5. Accumulating across a chain of slices

Packing is linear, so the sum of several packed products is the packing
of the summed products. `packed_mac_chain` uses this. `DEPTH` slices each
pack their own operand set `(a^k, w^k)` and add the product to the partial
sum from the slice before them, through the cascade input. Every field of
the last slice then holds a dot product `S_n = sum_k a_i^k * w_j^k`.

A sum of `DEPTH` products needs `clog2(DEPTH)` more bits than one product.
The padding is exactly that room: INT4's 3 padding bits allow 8 products,
so the chain reads 11-bit fields spaced 11 bits apart. With 4-bit operands
the sums lie in [-960, 840] and always fit.

The floor bias applies to the sums just as to single products. The
round-half-up correction still works: the bit below a field remains the
sign of everything packed beneath it. In the default chain, 45 % of
uncorrected sums come out one too small, and all corrected sums are exact.
The approximate correction is not offered here. It would add one for every
negative product below a field, but the borrow depends only on the sign of
their sum.

The slices form a systolic chain. Slice `k` gets its operands `k` cycles
after slice 0, exactly when the partial sum of slice `k-1` reaches its
post-adder. A new dot product can enter every cycle. The result follows
`DEPTH + 4` cycles later: 12 cycles for 8 slices.

## 6. Hardware structure and timing

```
dsp_packing_top
├── u_int4 : packed_mult_unit   (INT4, per-operation correction mode)
├── u_ovp  : packed_mult_unit   (six products, delta = -2, MSB restoration)
├── u_add  : add_pack_unit      (5 x 9-bit lanes)
└── u_acc  : packed_mac_chain   (8 cascaded INT4 slices, 11-bit dot products)

packed_mult_unit:  mult_packer ─► dsp48e2_mac ─► result_extract ─► mr_restore ─► register
                   approx_corr_term ─► 2-stage delay ─► C port      (lsb_calc inside mr_restore)
                   operands, valid, mode ─► 4-stage delay ─► result_extract / mr_restore
```

The four units are independent streams that share the clock and a
synchronous, active-high reset.

`dsp48e2_mac` is a behavioural-but-synthesizable model of the slice's data
path. It keeps the register stages of the DSP48E2 and leaves out the
vendor's control interface:

| input | registers before the post-adder | enters the result word |
|---|---|---|
| A, D | A/D register, pre-adder register, M register | cycle t |
| B | two B registers, M register | cycle t |
| C | C register | cycle t+2 |
| pcin, pin_sel | none | cycle t+3 |
| P | P register | valid after the edge ending cycle t+3 |

| unit | throughput | latency (in_valid to out_valid) |
|---|---|---|
| `packed_mult_unit` (`u_int4`, `u_ovp`) | 1 operation / cycle | 5 cycles |
| `add_pack_unit` (`u_add`) | 1 operation / cycle | 3 cycles |
| `packed_mac_chain` (`u_acc`) | 1 dot product / cycle | `DEPTH + 4` = 12 cycles |

Result order on the multiplier outputs is `r[j*NA + i] = a_i * w_j`. For
INT4 that is `{a_1w_1, a_0w_1, a_1w_0, a_0w_0}`, MSB first. `int4_mode`
uses the values of `corr_mode_e` in `dsp_pack_pkg`: 0 none, 1 approximate,
2 full.

## 7. Accuracy against the published figures

All results below come from exhaustive runs over all 2^16 operand sets.
They give mean absolute error (MAE), error probability (EP) and worst-case
error (WCE) over all products. Published values are in brackets.

| scheme (4-bit operands, 4 products) | MAE | EP | WCE |
|---|---|---|---|
| INT4, no correction | 0.37 (0.37) | 37.35 % (37.35 %) | 1 (1) |
| INT4, full correction | 0 (0) | 0 % (0 %) | 0 (0) |
| INT4, approximate correction | 0.02 (0.02) | **2.35 %** (3.13 %) | 1 (1) |
| Overpacking delta = -1 | 24.28 (24.27) | 49.85 % (49.85 %) | 129 (129) |
| Overpacking delta = -2 | 37.96 (37.95) | **64.90 %** (58.64 %) | 194 (194) |
| Overpacking delta = -3 | 45.53 (45.53) | 78.27 % (78.26 %) | 228 (228) |
| MR-Overpacking delta = -1 | 0.37 (0.37) | 37.35 % (37.35 %) | 1 (1) |
| MR-Overpacking delta = -2 | 0.48 (0.47) | 41.49 % (41.48 %) | 2 (2) |
| MR-Overpacking delta = -3 | 0.79 (0.78) | 49.96 % (49.95 %) | 4 (4) |

The per-product MAE for MR-Overpacking with `delta = -2` is 0.00, 0.61,
0.64 and 0.67 (published: 0.00, 0.60, 0.64, 0.66). Two error probabilities
differ, shown in bold. The approximate correction has no detail that could
explain the gap. For plain Overpacking with `delta = -2`, MAE and WCE match
while EP does not.

The six-product MR-Overpacking layout gives MAE 0.53, EP 46.9 % and WCE 2
over random operands. No published error figures exist for it. In the
packed adder, lane 0 is exact and lanes 1 to 4 are wrong for about 50 % of
random operands, by at most 1. The published figure is 51.83 % for a 9-bit
lane; which lane and which operand distribution were used is not stated.

## 8. Where this design departs from, or adds to, the published scheme

* **B is unsigned.** The six-product layouts put `a_2` in `B[17:14]`, so the
  model treats `B` as an unsigned 18-bit operand. The real DSP48E2 reads
  `B` as two's complement. On that device, these layouts need `a_2 <= 7`
  or a different assignment of operands to ports. The INT4 layout leaves
  `B[17]` at zero and is unaffected.
* **Two w entries.** `w` has exactly two entries, one per signed pre-adder
  port (A and D). The general formulation allows any number of entries;
  every layout evaluated in the publication has two.
* **The slice model** keeps only the data path: no OPMODE/ALUMODE, no clock
  enables, no pattern detector. Its pipeline follows the DSP48E2 register
  stages. The pre-adder wraps at 27 bits and `P` at 48 bits.
* **Own choices:** valid flags, the output register and the resulting
  latencies; the port format for mixed element widths (wide entries, with
  results sign-extended and lane sums zero-extended); the correction mode
  carried with each operation; the synchronous reset; placing guard bits
  at the lowest lane boundaries; feeding the adder through `C` and the
  cascade input; and combining the four units in one top level.
* **The accumulating chain** is built from a single remark: padding allows
  results to be summed across slices chained by their cascade ports. The
  publication shows no circuit for it and evaluates no accumulation. Its
  skew, its field width and the use of the full correction on sums are
  this design's own.
* **Not modelled:** the vendor primitive itself, and resource figures
  (LUT/FF counts).

## 9. Using and changing the RTL

Every module takes its layout from parameters. The defaults are the
published ones. To try another layout, give `packed_mult_unit` new
`A_W`, `W_W`, `A_OFF`, `W_OFF` and, for mixed widths, `A_WDTH`, `W_WDTH`.
The top level passes all of these through (`INT4_*`, `OVP_*`, `ADD_*`).
Keep these limits:

* `A_OFF[i] + A_WDTH[i] <= 18` and `W_OFF[1] + W_WDTH[1] <= 27`;
* the top result field must end at or below bit 47;
* the `a` fields must not overlap;
* results must lie in increasing bit order in the numbering `j*NA + i`.

For example, four 6 x 6-bit products with `delta = -2` use `A_OFF = {0, 10}`
and `W_OFF = {0, 20}`. Verilator needs array parameters passed as a named
`localparam` array, not as a literal in the instance.

Simulation with Verilator 5, from the repository root:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/dsp_pack_pkg.sv tb/pack_ref_pkg.sv tb/tb_dsp_packing_full.sv \
    --top-module tb_dsp_packing_full
./obj_dir/Vtb_dsp_packing_full
```

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. `tb/pack_ref_pkg.sv` holds the integer reference model that all
multiplier tests compare with.

| testbench | what it covers |
|---|---|
| `tb_dsp48e2_mac` | slice arithmetic, pipeline alignment, cascade and accumulate |
| `tb_mult_packer` | port contents and the packed-product identity, all INT4 operands, mixed widths |
| `tb_approx_corr_term` | bit positions of the correction word |
| `tb_result_extract` | floor bias and full correction, all INT4 operands |
| `tb_lsb_calc` | product LSBs for K = 1, 2, 3 |
| `tb_mr_restore` | restoration for `delta = -2`, worked example, error bounds |
| `tb_packed_mult_unit` | INT4 with random modes, six-product layouts, mixed widths with and without overlap, latency |
| `tb_add_pack_unit` | lanes with and without guard bits, mixed 9/10-bit lanes, the 8-bit example |
| `tb_packed_mac_chain` | chains of 8 and 4 slices, extreme sums, floor and corrected readings, latency |
| `tb_dsp_packing_top` | whole top, and a variant with guard bits; counts each mechanism |
| `tb_dsp_packing_full` | default top: exhaustive INT4 in all modes, accuracy table, chain statistics |
| `tb_table1_error_stats` | Overpacking and MR-Overpacking, `delta = -1 .. -3`, exhaustive |

All of them finish within seconds.
