# SIMDive: an approximate SIMD multiplier-divider built on Mitchell's logarithm

SIMDive computes products and quotients through logarithms. In the
logarithmic domain a multiplication is an addition and a division is a
subtraction. Mitchell's approximation of log2 needs nothing beyond a
leading-one detector and wires, so the unit is made of adders and shifters
and has no array of partial products. The same adders serve multiplication
and division. They are also cut into 8-bit slices whose carries can be passed
on or stopped, so one 32-bit unit can work as:

* one 32x32 lane,
* two 16x16 lanes,
* one 16x16 lane and two 8x8 lanes, or
* four 8x8 lanes.

Each lane multiplies or divides independently, with no reconfiguration.

Plain Mitchell arithmetic has a mean relative error of about 4 %. SIMDive
brings this below 1 % with a small correction term. The term is looked up
from the three leading fraction bits of both operands: 64 cells, one 6-input
LUT per coefficient bit. It is added in the same adder pass as the two
fractions, a three-input (ternary) addition, so the correction adds almost
no delay.

The RTL here is a portable SystemVerilog rendering of that architecture. It
does not use FPGA primitives. Each adder is written as ordinary arithmetic,
cut into the 8-bit slices the architecture chains.

## The arithmetic of one lane

Write a W-bit operand as `A = 2^k (1 + x)`, where `k` is the position of the
leading one and `0 <= x < 1` is made of the bits below it. Mitchell takes
`log2 A ~ k + x`. For two operands:

```
multiply:  k = k1 + k2,  t = x1 + x2 + c
divide:    k = k1 - k2,  t = x1 - x2 + c
```

Here `c` is the error coefficient (next section). The anti-logarithm has two
cases for each operation in the usual formulation:

* product: `2^k (1+t)` if `t < 1`, else `2^(k+1) t`;
* quotient: `2^k (1+t)` if `t >= 0`, else `2^(k-1) (2+t)`.

All four cases are one formula:

```
result = 2^(k + floor(t)) * (1 + frac(t))
```

The hardware relies on this. Each fraction is held left-aligned in a W-bit
field, as `x * 2^W`. The adder's W-bit sum field is then `frac(t)` directly.
`floor(t)` follows from the carry out of the lane, minus the number of
operands that entered negated:

* the two's complement of `x2` in a divide lane;
* a negative coefficient.

The output stage turns `floor(t)` into an exponent correction of -1, 0 or +1
and shifts the mantissa `{1, frac}` into place.

Example (8-bit lanes, plain Mitchell): 43 = 2^5 x 1.01011b and
10 = 2^3 x 1.01b. The fraction sum is 0.10011b, below 1, so the product is
2^8 x 1.10011b = 408 (exact: 430). The quotient has `t = 0.00011b >= 0`, so
it is 2^2 x 1.00011b = 4.375, which the 8.8 fixed-point output keeps as
0x0460.

## Error reduction

For each pair of fractions there is one exact correction `c(x1, x2)` that
makes the anti-log above exact:

```
multiply:  c = x1*x2                   if 1 + x1 + x2 + x1*x2 < 2
           c = (1-x1)*(1-x2)/2         otherwise
divide:    c = x2*(x2-x1)/(1+x2)       if x1 >= x2
           c = (x1-x2)*(1-x2)/(1+x2)   otherwise
```

This `c` is continuous across both case boundaries. It is at most 0.25 for
multiplication, and between -0.17 and 0 for division, since Mitchell's
divider always overestimates. The 3 MSBs of `x1` and of `x2` pick one of 64
cells. Each cell stores the mean of `c` over the cell as a signed 8-bit
number with LSB weight 2^-9. The two tables (`MUL_TAB`, `DIV_TAB` in
`simdive_pkg.sv`) were computed from the formula above on a 64x64 grid of
interior points per cell and rounded to nearest. The testbenches recompute
them from the formula and compare.

Because `c` depends only on `x1` and `x2`, and not on `k`, one table serves
8-, 16- and 32-bit lanes. The coefficient is aligned to each lane's field.
In an 8-bit lane this drops the lowest table bit, because the lane's field
has only 8 bits.

**Accuracy knob.** `COEF_BITS` (1..8, default 8) keeps the upper
`COEF_BITS` bits of each entry, one LUT per bit. `tb_accuracy` measures, on
uniform random operands:

| coefficient bits | 8x8 mul | 8/8 div | 16x16 mul | 16/8 div |
|---|---|---|---|---|
| 8 | 0.86 % | 1.18 % | 0.76 % | 0.78 % |
| 6 | 0.88 % | 1.19 % | 0.80 % | 0.80 % |
| 4 | 1.36 % | 1.72 % | 1.31 % | 1.32 % |

The values are mean relative errors. The corresponding figures published for
this architecture are 0.82 % for 16x16 multiplication and 0.77 % for 16/8
division; plain Mitchell gives about 3.9 % and 4.1 %.

Peak errors are larger for 8-bit lanes:

* 11 % for products of small operands;
* up to 50 % for quotients near the 2^-8 resolution of the fixed-point
  output.

These come from the number formats, not from the correction.

## Lanes, slots and the carry chain

The 32-bit operands are four 8-bit *slots* (slot 0 = bits 7:0). A lane starts
at a slot `s`, is W = 8, 16 or 32 bits wide, and covers W/8 slots. The
one-hot precision mode `prec` (`prec_t` in the package) selects the layout:

| `prec` | code | lanes (slot 3 ... slot 0) |
|---|---|---|
| `PREC_32` | 00001 | 32 |
| `PREC_16_16` | 00010 | 16, 16 |
| `PREC_16_8_8` | 00100 | 16, 8, 8 |
| `PREC_8_8_16` | 01000 | 8, 8, 16 |
| `PREC_8X4` | 10000 | 8, 8, 8, 8 |

Three blocks are built from per-slot slices:

* the log calculator: eight 4-bit leading-one detectors, then, per lane,
  the highest non-zero segment inside the lane;
* the divide-mode negation;
* the ternary adder.

Between adjacent slices a multiplexer either passes the carry on (both slots
are in the same lane) or forces 0 (lane boundary). The functions
`slot_link`, `lane_width` and `lane_base` in `simdive_pkg` encode this. The
ternary adder's slice carry is 2 bits wide because three words plus a carry
can exceed 9 bits.

The integer-part adders (5-bit `k1 +/- k2`) and the output shifters are one
per slot that can start a lane. Their widths are 32, 8, 16 and 8 bits for
slots 0 to 3.

## Interface and timing (`simdive`)

| port | width | meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | clock; synchronous active-low reset (clears `out_valid` only) |
| `in_valid` | 1 | request present this cycle |
| `a`, `b` | 32 | operands (`a` is the dividend) |
| `prec` | 5 | one-hot lane layout |
| `div` | 4 | per slot: 1 = divide; a lane uses the bit of its lowest slot |
| `out_valid` | 1 | result valid |
| `result` | 64 | lane starting at slot `s`, width W, in `result[16s +: 2W]` |

The datapath is combinational up to one output register. A request in cycle
*n* gives `out_valid` and `result` in cycle *n+1*, and a new request can
enter every cycle. An assertion checks that `prec` is one-hot whenever
`in_valid` is high.

Result formats per lane:

* **Product:** a 2W-bit unsigned integer, truncated.
* **Quotient:** fixed point with W integer and W fraction bits (value =
  field / 2^W), truncated. Dividing by an 8-bit value in a 16-bit lane gives
  the 16/8 division.
* **Zero dividend or zero factor:** 0.
* **Division of a non-zero value by 0:** all ones.
* **Clamps.** The correction can, very rarely, push `t` out of its normal
  range; random operands reach one of them only a few times in 10,000 requests.
  A multiply with `floor(t) = 2` returns the largest mantissa at exponent
  `k+1`. A divide with `floor(t) = -2` returns 1.0 at exponent `k-1`.

## Modules

| file | role |
|---|---|
| `simdive_pkg.sv` | precision type, lane helper functions, coefficient tables |
| `lod4.sv` | 4-bit leading-one detector: zero flag and position |
| `log_calc.sv` | SIMD log2 of a 32-bit operand: per-lane `k`, zero flag, left-aligned fraction |
| `twos_comp.sv` | per-lane negation of the second fraction in divide lanes, with a borrow flag |
| `coef_select.sv` | per-bit 64-entry LUTs for multiply and divide, mode multiplexer |
| `ternary_adder.sv` | four chained 8-bit three-operand slices |
| `int_adder.sv` | `k1 + k2` or `k1 - k2` |
| `out_shifter.sv` | `floor(t)`, clamping, zero handling, anti-log shift |
| `simdive.sv` | top: wiring, coefficient alignment, output packing, output register |

## Simulation

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. The shared reference model is
`tb/tb_ref_pkg.sv`. It recomputes the coefficient tables from the formula
with real arithmetic and models a lane with plain integer arithmetic.

| testbench | what it covers |
|---|---|
| `tb_simdive` | the top at default parameters: 50,000 requests in all five layouts with mixed multiply and divide, directed corners, latency |
| `tb_accuracy` | the error table above, for 8, 6 and 4 coefficient bits; results must match the reference model |
| `tb_image_workloads` | multiply blending and Gaussian noise removal (divide-only and hybrid) on generated 64x64 images, PSNR |
| `tb_ann_layer` | a 784-100-10 fully connected network with 8-bit operands, exact against approximate inference |
| `tb_lod4`, `tb_log_calc`, `tb_twos_comp`, `tb_coef_select`, `tb_ternary_adder`, `tb_int_adder`, `tb_out_shifter` | one block each |

Besides the result comparison and the latency check, `tb_simdive` does the
following:

* it measures the 16-bit mean errors;
* it counts how often each mechanism happens (every layout, multiply,
  divide, mixed, zero operand, divide by zero, both clamps, multi-slot
  carry chains), and fails if one never happens.

The two application testbenches use generated data, not the image and
digit data sets the architecture was originally evaluated on. They report:

* multiply blending: 50 dB PSNR against exact products;
* Gaussian filtering, PSNR against the noise-free image: 32.6 dB exact,
  32.5 dB divide-only, 32.5 dB hybrid (26.8 dB before filtering);
* 784-100-10 network with random weights: the winning class is the same
  with exact and approximate products on all 20 inputs.

The hybrid filter uses the mixed layout `PREC_16_8_8`. Each request carries
two 8x8 kernel products and one 16-bit division.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Itb -y rtl -y tb \
  rtl/simdive_pkg.sv tb/tb_ref_pkg.sv tb/tb_simdive.sv --top-module tb_simdive
./obj_dir/Vtb_simdive
```

For another testbench, change the last file and `--top-module`. Each
testbench runs in about a second or less.

## What follows the architecture and what is this design's own

These parts follow the published architecture:

* Mitchell's multiply and divide, with division done by negating the
  second operand's log;
* 4-bit leading-one detection, each with a zero flag and a position;
* the four 8-bit units linked by carry multiplexers;
* the five lane layouts with per-lane multiply/divide and one-hot precision
  control;
* the 64-cell correction indexed by 3+3 fraction MSBs, one LUT per
  coefficient bit, added in a ternary adder before the anti-log shift;
* eight coefficient bits as the most accurate setting.

These parts are this design's own:

* **Coefficient values.** The published text says each cell holds the
  average error of its region but prints no values. The tables here are
  recomputed from the exact-correction formula above. The measured accuracy
  agrees with the published figures to within a few hundredths of a percent,
  but the tables need not match the original ones bit for bit.
* **Two LUT banks.** Separate multiply and divide coefficients are selected
  by a multiplexer; the original's way of sharing LUTs between the two modes
  is not described.
* **Number formats.** Left-aligned fractions, 5-bit exponents in every
  lane, a signed coefficient with LSB 2^-9, and 2-bit slice carries.
* **Output rules.** The quotient fixed-point format, truncation, zero and
  divide-by-zero results, and the overflow clamps.
* **Merged lanes.** The architecture draws four separate 8-bit units. Here
  their log calculators, negation and fraction adders are SIMD-wide blocks
  sliced per slot. The output shifters are sized per starting slot.
* **Output register.** The output register and the valid handshake; the
  architecture is specified as combinational.
* **No FPGA primitives.** The Virtex-7 LUT and carry-chain mapping is not
  written as primitives. Power gating of idle lanes is not included.
