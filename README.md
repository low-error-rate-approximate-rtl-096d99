# Approximate 8×8 multiplier with low error rate for DNN inference

DNN inference with 8-bit quantisation spends most of its arithmetic in
8×8 unsigned multiplications. Exact multipliers cost area, power and delay
that a network does not always need. This design cuts that cost by
approximating only a few rare products, and only inside small multiplier
cells.

The 8-bit operands are split into 3-, 3- and 2-bit slices. Nine small
multipliers form the slice products, which are shifted and added. The eight
3×3 cells are approximate: each one is wrong on only 6 of its 64 input pairs,
namely the products above 31. Dropping the sixth output bit from those six
cases makes the cell noticeably smaller and faster. The 2×2 cell on the top slices stays
exact. Of the eight 3×3 cells, four see a 2-bit slice, and a 3-bit × 2-bit
product is never above 21. Those four cells are therefore always exact, and
errors can only come from the four cells M0, M1, M3 and M4 that multiply the
two lower slices.

Everything here is combinational: there is no clock, register or reset. The
product is valid one propagation delay after the operands change.

## The 3×3 cells

### MUL3x3_1: a 5-bit result

A 3-bit × 3-bit product needs six bits only for the six pairs whose product
exceeds 31. MUL3x3_1 forces O5 = 0 for those six pairs and maps them to values
that keep the logic of O4..O0 small:

| α   | β   | exact | MUL3x3_1 | MUL3x3_2 |
|-----|-----|------:|---------:|---------:|
| 101 | 111 | 35    | 27       | 27       |
| 110 | 110 | 36    | 24       | 40       |
| 110 | 111 | 42    | 30       | 46       |
| 111 | 101 | 35    | 27       | 27       |
| 111 | 110 | 42    | 30       | 46       |
| 111 | 111 | 49    | 29       | 45       |

All other 58 pairs are exact. The error rate is 6/64 = 9.375 % and the mean
error distance is 72/64 = 1.125. `rtl/mul3x3_approx1.sv` writes O0..O4 as
sum-of-products equations minimised from this table. The equations use
23 product terms in all, and O5 is the constant 0.

### MUL3x3_2: the prediction unit

Four of the six errors of MUL3x3_1 are large (12 to 20). All four have
α[2:1] = β[2:1] = 11. MUL3x3_2 keeps O3..O0 of MUL3x3_1 and adds a one-gate
*prediction unit* on the top two bits:

    hit = α2·α1·β2·β1
    O5  = hit
    O4  = O4(MUL3x3_1) · ¬hit

A hit turns O5:O4 from 01 into 10, which adds 16. That brings the four large
errors down to 4 each (last column above). The error rate stays 6/64, and the
mean error distance falls to 32/64 = 0.5. The cell again needs six output
bits, but in exchange the 8×8 products come out much more accurate.

## Aggregation into 8×8

With A = A₂·64 + A₁·8 + A₀ (A₂ = A[7:6], A₁ = A[5:3], A₀ = A[2:0]) and B
split the same way:

| cell | A slice | B slice | shift | type                     |
|------|---------|---------|------:|--------------------------|
| M0   | A[2:0]  | B[2:0]  | 0     | 3×3 approx.              |
| M1   | A[5:3]  | B[2:0]  | 3     | 3×3 approx.              |
| M2   | A[7:6]  | B[2:0]  | 6     | 3×3 (exact here), removable |
| M3   | A[2:0]  | B[5:3]  | 3     | 3×3 approx.              |
| M4   | A[5:3]  | B[5:3]  | 6     | 3×3 approx.              |
| M5   | A[7:6]  | B[5:3]  | 9     | 3×3 (exact here)         |
| M6   | A[2:0]  | B[7:6]  | 6     | 3×3 (exact here)         |
| M7   | A[5:3]  | B[7:6]  | 9     | 3×3 (exact here)         |
| M8   | A[7:6]  | B[7:6]  | 12    | exact 2×2                |

A 2-bit slice enters its 3×3 cell with a leading zero. The shifters are
fixed, so they are only wiring. `pp_adder` adds the nine terms into the
16-bit product. No approximate cell returns more than 46, less than the exact
maximum of 49, so the sum never exceeds 255·255 and cannot overflow 16 bits.
The structure of the adder is left to synthesis: a single multi-operand sum,
which tools map onto a compressor tree.

The parameter `VARIANT` of `mul8x8_approx` (type `mul_pkg::variant_e`) picks
one of three aggregations:

| VARIANT   | M0–M7    | M2            |
|-----------|----------|---------------|
| MUL8X8_1  | MUL3x3_1 | present       |
| MUL8X8_2  | MUL3x3_2 | present (default) |
| MUL8X8_3  | MUL3x3_2 | removed with its shifter |

MUL8X8_2 is the default because its DNN accuracy is closest to exact
multiplication. MUL8X8_3 relies on networks retrained so that one operand's
top two bits are almost always 00. In that case A₂·B₀ is almost always zero,
and dropping it saves area and delay. For other operands it loses up to
3·7·64 = 1344.

## Accuracy

Measured by `tb/tb_mul8x8_approx.sv` over all 65,536 operand pairs, uniformly
weighted:

| variant  | ER      | MED    | NMED    |
|----------|--------:|-------:|--------:|
| MUL8X8_1 | 27.20 % | 91.12  | 0.140 % |
| MUL8X8_2 | 27.20 % | 39.03  | 0.060 % |
| MUL8X8_3 | 73.71 % | 357.59 | 0.550 % |

(ER is the share of inexact products, MED the mean |error| and NMED = MED/255².)

These figures differ from the published ones (20.49 %, 22.8 % and 31.41 %
ER; MEDs of 114.83, 137.04 and 648.20). The published 3×3 error rates and
mean error distances are reproduced exactly. The 8×8 figures were evaluated
under conditions that are not fully stated, most likely non-uniform operands
drawn from DNN data. With uniform inputs, MUL8X8_1 and MUL8X8_2 have exactly
the same error rate, because their cells fail on the same input pairs. The
uniform numbers above should be taken as the design's own reference values.

## Departures from the published description

* **O1 equation.** The published equation for O1 of MUL3x3_1 has
  α1·¬α0·β1 as its second product term. That term contradicts the cell's
  truth table at 2×2, 2×6, 6×2 and 6×6. The RTL uses α1·¬α0·β0, which
  matches the table on all 64 pairs and makes O1 the exact
  α1β0 ⊕ α0β1.
* **7×6 in MUL3x3_2.** The published table gives 38 for 7×6 but prints
  output bits 101110 = 46. The prediction rule also gives 46, and so does
  this RTL.
* **Which cell to remove.** The text also mentions removing M6 (for small
  B) in place of M2. Only the M2 removal is one of the three defined
  variants, and only it is built.
* **Observation port.** `pred_hit[7:0]` reports which cells' prediction units
  fired. It is an addition for verification and can be left unconnected.
* The exact 2×2 cell is written as its four standard output gates. The
  adder's internal structure is not specified in the source description.

## Files

| file | contents |
|------|----------|
| `rtl/mul_pkg.sv` | variant enum, widths, shift table |
| `rtl/mul3x3_approx1.sv` | MUL3x3_1 sum-of-products logic |
| `rtl/pred_unit.sv` | prediction unit for O5/O4 |
| `rtl/mul3x3_approx2.sv` | MUL3x3_2 = MUL3x3_1 + prediction unit |
| `rtl/mul2x2_exact.sv` | exact 2×2 multiplier (M8) |
| `rtl/pp_adder.sv` | shifters and 9-operand adder, `HAS_M2` parameter |
| `rtl/mul8x8_approx.sv` | top: slicing, M0–M8, adder; `VARIANT` parameter |
| `tb/mul_ref_pkg.sv` | truth-table reference models of the 3×3 cells and 8×8 aggregation |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_mul8x8_full` |

The reference models in `tb/mul_ref_pkg.sv` come from the truth tables above,
not from the logic equations. Every testbench ends with one line
`TB_RESULT checks=N failures=M`.

* `tb_mul3x3_approx1` and `tb_mul3x3_approx2` sweep all 64 input pairs. They
  also check the error count (6) and the summed error distance (72 and 32).
* `tb_mul8x8_approx` sweeps all 65,536 pairs through all three variants. It
  checks every product and the error totals of each variant. It also counts
  how often each mechanism acted: inexact cells, prediction-unit hits, the
  effect of removing M2, and M8's contribution.
* `tb_mul8x8_full` runs the default top without parameter overrides and
  prints its error metrics.

## Simulating

With Verilator 5, list the package first:

    verilator --binary --timing --assert -Irtl \
        rtl/mul_pkg.sv tb/mul_ref_pkg.sv \
        rtl/mul3x3_approx1.sv rtl/pred_unit.sv rtl/mul3x3_approx2.sv \
        rtl/mul2x2_exact.sv rtl/pp_adder.sv rtl/mul8x8_approx.sv \
        tb/tb_mul8x8_approx.sv --top-module tb_mul8x8_approx
    ./obj_dir/Vtb_mul8x8_approx

Each testbench runs in a few seconds at most.

## Changing it

* To select a variant, set `mul8x8_approx #(.VARIANT(mul_pkg::MUL8X8_1))`.
* To try another approximation of the 3×3 cell, edit the equations in
  `mul3x3_approx1.sv` and the matching table in `tb/mul_ref_pkg.sv`. The
  totals checked in `tb_mul8x8_approx` (inexact count and summed error
  distance per variant) then have to be recomputed from the new table.
* The slice-to-cell map is the pair `A_SEL`/`B_SEL` in `mul8x8_approx.sv`
  together with `PP_SHIFT` in `mul_pkg.sv`.
