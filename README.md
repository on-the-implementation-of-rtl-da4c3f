# A single-cycle fixed-point e^-a unit for non-negative operands

Activation and kernel functions in neural-network and signal-processing
accelerators (sigmoid, tanh, ELU, Gaussian, exponential decay) can all be
written in terms of e^-|x|. Restricting the unit to a non-negative operand a
makes it cheap: the result always lies in (0, 1], and for a >= 16 it is below
2^-23, so it saturates early. This RTL builds such a unit after M. Chandra,
"On the Implementation of Fixed-point Exponential Function for Machine
Learning and Signal Processing Accelerators". It splits the operand into three
parts, evaluates e^-part for each, and multiplies the results:

    e^-a = e^-(integer part) * e^-(top three fraction bits) * e^-(remaining fraction)
              16-word table        8-word table                 cubic series, x < 1/8

The series is evaluated in 1's complement arithmetic, so it has no
subtractors. The whole datapath has four multipliers and one adder, and it
produces one result per clock cycle.

```
            +--------------+  idx_int (4b)   +--------+ e^-k
 a -------->|   operand    |---------------->| LUT #0 |------\
 precision->|   splitter   |  idx_frac (3b)  +--------+       (x)--\
            |              |---------------->| LUT #1 |------/      (x)--> >>(17-P) --> [reg] --> y
            |              |  x_imp (13b)    +--------+            /
            |              |---------------->| series |-----------/
            +--------------+   sat           +--------+
```

## Number formats

* **Operand** `a`: an unsigned `IN_W`-bit integer (32 by default). Its value is
  `a * 2^-P`, where P is the run-time input `precision` (0 to `PMAX` = 16).
  Values of `precision` above `PMAX` are treated as `PMAX`.
* **Result** `y`: e^-(a*2^-P) * 2^P, truncated. This is an unsigned number with
  one integer bit and P fractional bits, right-aligned in `PMAX+1` = 17 bits.
  The result therefore has the same resolution as the operand. The largest
  value the datapath produces is 1 - 2^-17, so `y` never reaches 1.0.
* **Inside**: the tables and multipliers carry `LUT_W` = `MUL_W` = 17
  fractional bits. The tables also have one integer bit, so that e^0 = 1.0 is
  stored exactly.

## Splitting the operand (`exp_operand_splitter`)

With P fractional bits, the operand is cut at fixed distances from its binary
point:

| field | bits | use |
|---|---|---|
| saturation part | `IN_W-1` .. `P+4` | non-zero means a >= 16 |
| a_precise_1 | `P+3` .. `P` | integer 0..15, index of LUT #0 |
| a_precise_2 | `P-1` .. `P-3` | multiples of 1/8, index of LUT #1 |
| a_imprecise | `P-4` .. `0` | residual x < 1/8, goes to the series |

Because P is chosen at run time, the splitter first shifts the operand left
by `PMAX - P`. This makes the binary point fixed at bit `PMAX`, so the residual
always leaves on a `PMAX-3` = 13-bit bus whose LSB weighs 2^-16, and the series
circuit after it has a fixed shape. When P < 3, the low index bits are zero.

Saturation: when the saturation part is non-zero, all three lower fields are
forced to ones and the datapath continues as normal. The result is then the
value for a = 16 - 2^-16, which is about 1.1e-7 and rounds to 0 at any
precision up to 16. The splitter is purely combinational: one shifter, one
OR-reduction and a multiplexer.

## The two tables (`exp_lut_int`, `exp_lut_frac`)

Word k of LUT #0 holds round(e^-k * 2^17), for k = 0..15. Word j of LUT #1
holds round(e^-(j/8) * 2^17), for j = 0..7. The words are computed when the
design is elaborated, by a constant function in `exp_pkg` that applies this
formula. The tables are constant ROMs, so synthesis turns them into logic.

## The series circuit in 1's complement (`exp_series_approx`)

This is the least obvious part of the design. For 0 <= x < 1/8, the
third-order Taylor series is written in Horner form:

    e^-x ~ 1 - x (1 - x/2 (1 - x/3))

Two approximations then turn it into a circuit with no divider and no
subtractor:

1. **Replace 1/3 with 2.5/8 = 1/4 + 1/16.** The innermost factor becomes
   1 - ((x>>2) + (x>>4)). It needs one adder and no multiplier.
2. **Replace every `1 - v` with `~v`.** For a fraction v with F bits,
   inverting every bit gives 1 - 2^-F - v. That is the true difference minus
   one LSB of that term, and it costs only inverters.

The result is three terms, each with its own word length (the "variable
word-length" form):

| term | formula | fractional bits (parameter) |
|---|---|---|
| cubic  T_c | `~((x>>2) + (x>>4))` | 8 (`CUBIC_W`) |
| square T_s | `~((x>>1) * T_c)` | 11 (`SQUARE_W`) |
| linear y   | `~(x * T_s)` | 17 (`MUL_W`) |

Each product is cut to its term's word length by dropping the low bits. The
bit after the cut is an inversion: a product with F fractional bits becomes
the term 1 - 2^-F - product. Here `x>>1` only moves the binary point, so no
bit of x is lost. Every product is bounded (5x/16 < 2^-4, (x/2)*T_c < 2^-4,
x*T_s < 2^-3), so the upper bits of each cut are zero and are dropped.

**Error budget.** An error e_c in T_c reaches the output scaled by x^2/2 <=
2^-7. An error e_s in T_s is scaled by x <= 2^-3. Truncation and the 1's
complement each cost up to one LSB of their term. With 8 and 11 bits, this
gives roughly 2 * 2^-8 * 2^-7 + 2 * 2^-11 * 2^-3 = 2^-14 + 2^-13, about 6
units of 2^-16 in the worst case. Measured over all 8192 residuals, the
largest error is **4.41 units of 2^-16**. With all three terms at 17 bits
(`CUBIC_W = SQUARE_W = 17`, the constant word-length variant), it is 0.73
units.

The word lengths 8 and 11 are the source paper's numbers, read as fractional
bits. The paper states that this choice keeps the whole unit within about one
unit of 2^-16. This implementation does not reach that: it is about 4.4 units
(see the tables below). Possible causes are a different meaning of "precision"
for the two terms, or rounding where this design truncates. The parameters
let you widen the terms. With the square term at 13 bits the unit reaches 15
correct fractional bits. With every term, table and multiplier at 17 bits, the
largest error is 1.56 units.

## Combining and timing (`exp_mult_stage`, `exp_neg`)

`exp_mult_stage` first multiplies the two table words and truncates the
product to 17 fractional bits. It then multiplies that by the series value
and truncates again. `exp_neg` shifts the 17-fractional-bit product right by
`17 - P` to give the result at the operand's precision.

Everything from the input ports to the output register is combinational:

* `in_valid` with `a` and `precision` is sampled on a rising edge.
* `y`, `sat` and `out_valid` hold the result from that edge until the next
  one. The latency is one cycle and the unit accepts a new operand every
  cycle.
* `sat` reports that the operand was 16 or more.
* `rst_n` is an asynchronous, active-low reset of the output register.
* An assertion checks that every accepted operand is followed by `out_valid`.

The paper only says that the function is computed in one cycle. The
valid/reset interface is this design's own.

After synthesis (yosys, generic cells), the top contains 4 multipliers, one
12-bit adder (the cubic term), the two ROMs (432 bits), shifters and 19
flip-flops.

## Measured accuracy

The figures below come from the system-level testbenches. They are the largest
absolute error over the tested operands, in units of the result's last place.

| case | default build (8/11-bit terms) | 17-bit terms |
|---|---|---|
| e^-a, P = 8, every a < 17*2^8 | 1.00 | - |
| e^-a, P = 12, every a < 17*2^12 | 1.03 | - |
| e^-a, P = 16, every a < 17*2^16 | 4.41 | 1.56 |
| Gaussian, P = 16 | 3.64 | 1.54 |
| sigmoid, P = 16 | 1.56 | 1.56 |
| tanh, P = 16 | 3.12 | 3.12 |

The inputs x run from -16 to 16 in steps of 1/256. The Gaussian uses
mu = 0.75 and sigma = 1.5, so its exponent covers 0 to about 62. For
comparison, the paper reports 1.71 (Gaussian), 1.62 (sigmoid) and 3.04 (tanh)
units with 17-bit tables and multipliers. For the derived functions,
only e^-x is computed in hardware. The argument preparation and the divisions
are done in real arithmetic in the testbench.

### Word length of the two coarse terms

The grid below gives the number of fractional bits that are always right,
floor(16 - log2(largest error)), over every operand below 16 at P = 16. Each
entry shows this design first and the source paper's figure second. Tables
and multipliers are at 17 bits.

| cubic \ square | 10 | 11 | 12 | 13 | 14 | 15 | 16 |
|---|---|---|---|---|---|---|---|
| 5  | 12/13 | 12/13 | 12/13 | 12/13 | 12/13 | 12/13 | 12/13 |
| 6  | 13/14 | 13/14 | 13/14 | 13/14 | 13/13 | 13/13 | 13/13 |
| 7  | 12/14 | 13/14 | 14/14 | 14/14 | 14/14 | 14/14 | 14/14 |
| 8  | 12/14 | 13/15 | 14/15 | 15/14 | 14/14 | 14/14 | 14/14 |
| 9..13 | 12/14 | 13/15 | 14/15 | 15/15 | 15/15 | 15/15 | 15/15 |

The shape agrees with the paper: little gain beyond about 8 cubic bits, and a
plateau at 15 bits. In the square direction, this design needs about two more
bits for the same accuracy.

### Table and multiplier precision

Largest error in units of 2^-Q. Every series term is at the multiplier width.

| Q | table bits | mult Q | Q+1 | Q+2 | Q+3 | Q+4 |
|---|---|---|---|---|---|---|
| 8  | 8  | 2.27 | 1.69 | 1.42 | 1.37 | 1.37 |
| 8  | 12 | 2.46 | 1.60 | 1.29 | 1.13 | 1.06 |
| 12 | 12 | 2.27 | 1.74 | 1.53 | 1.49 | 1.47 |
| 12 | 16 | 2.64 | 1.82 | 1.39 | 1.17 | 1.09 |
| 16 | 16 | 2.62 | 2.00 | 1.68 | 1.57 | 1.52 |
| 16 | 17 | 2.21 | 1.56 | 1.35 | 1.27 | 1.23 |
| 16 | 20 | 2.39 | 1.74 | 1.35 | 1.17 | 1.07 |

## Parameters

| parameter | default | meaning |
|---|---|---|
| `IN_W` | 32 | operand width (own choice; the paper gives none) |
| `PMAX` | 16 | largest precision P; sets the residual bus to `PMAX-3` bits |
| `LUT_W` | 17 | fractional bits of the table words (at most 30) |
| `MUL_W` | 17 | fractional bits of the linear term and both output multipliers (>= `PMAX`) |
| `CUBIC_W` | 8 | fractional bits of T_c |
| `SQUARE_W` | 11 | fractional bits of T_s |

## Files and simulation

`rtl/`:

* `exp_pkg.sv`: shared field widths and the table-filling function.
* `exp_operand_splitter.sv`, `exp_lut_int.sv`, `exp_lut_frac.sv`,
  `exp_series_approx.sv`, `exp_mult_stage.sv`: the blocks.
* `exp_neg.sv`: the top.

`tb/`:

* One self-checking testbench per block, `tb_<module>.sv`.
* `exp_ref_pkg.sv`: a bit-exact integer reference model.
* `tb_exp_derived.sv`: the Gaussian, sigmoid and tanh evaluation.
* `tb_exp_wordlength.sv`: the cubic/square word-length grid, 63 units side
  by side.
* `tb_exp_precision_sweep.sv`: the table/multiplier precision sweep, 75
  units side by side.

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/exp_pkg.sv tb/exp_ref_pkg.sv tb/tb_exp_neg.sv --top-module tb_exp_neg
    ./obj_dir/Vtb_exp_neg

`tb_exp_neg` runs the top at its default parameters, in about one second. It
covers:

* every operand up to saturation at P = 16, 12 and 8;
* a sweep of every P from 0 to 16;
* random operands with P from 0 to 31;
* bubbles in `in_valid`;
* an asynchronous reset in the middle of traffic.

Every output is checked bit-for-bit against the reference model and against
the real e^-a. The testbench also counts saturations, precision switches and
precision clamps, and fails if any of them never happens.

## What follows the source and what does not

Taken from the paper:

* the block structure and the order of the two output multiplications;
* the field boundaries and the saturation rule;
* the table depths (16 and 8);
* the series circuit ~(x * ~((x>>1) * ~((x>>4) + (x>>2)))) with 1's
  complement subtraction;
* the 17/17/11/8-bit word lengths;
* single-cycle operation.

This design's own choices:

* the operand width;
* normalising the operand for a run-time P;
* the result format (P fractional bits, truncated);
* rounding the table words to nearest and truncating every product;
* the valid/reset interface and the `sat` output;
* clamping P to `PMAX`.

The paper has two descriptions of saturation. One says the output saturates
to "the exponential of 16". The other says all lower operand fields are set to
their maximum. This design follows the second; the two differ by less than
one LSB at 16 bits.

Where the results differ: with the paper's 8/11-bit cubic/square terms,
this RTL's largest error at 16 bits is about 4.4 units rather than the
paper's one unit. The word-length grid above shows the same shortfall of
about two bits in the square term.

Not built:

* the 2's complement variant, which the paper only compares against;
* the reciprocal unit suggested for positive operands;
* the arithmetic around e^-x in the derived functions.
