# Fixed-point tanh from velocity factors

This is a pipelined hardware unit for the hyperbolic tangent. It is meant as
the activation unit of a neural-network accelerator. By default it takes a
signed 16-bit input in s3.12 format (3 integer bits, 12 fraction bits) and
returns tanh in s.15 format. It produces one result per clock, with a latency of
7 clocks. It does not evaluate a series and does not interpolate between table
points. Instead it uses an identity of tanh that is exact. Errors come only from
the finite word widths and from a fixed number of Newton-Raphson steps in the
divider.

The RTL follows the method of M. Chandra, *"A Novel Method for Scalable VLSI
Implementation of Hyperbolic Tangent Function"*. That method takes an
oral-calculation trick for tanh and reworks it for hardware. The paper gives
the algorithm and the block diagram. Word-level details it leaves open were
chosen here. They are listed in "Own choices and departures" below.

## The idea: velocity factors

Define the velocity factor of an angle `a` as

    f(a) = (1 - tanh a) / (1 + tanh a)  =  exp(-2a)

Two properties make it useful:

* **Sums become products.** From the addition theorem for tanh,
  `f(a + b) = f(a) * f(b)`. A fixed-point magnitude `|x|` is a sum of place
  values `2^k`, one for each set bit. So `f(|x|)` is the product of the factors
  of the set bits. All of those factors are constants.
* **The way back is one division.** `tanh a = (1 - f) / (1 + f)`.

For `a >= 0`, `f` lies in (0, 1]. So every factor, and every product of
factors, is a plain unsigned fraction. No dynamic range has to be handled.
The word width can follow the precision you want: this is the "scalable" part.

tanh is odd. The unit therefore computes tanh(|x|) and puts the sign back at
the end.

## Data path

```
 x (s3.12) ──► tanh_abs ──► |x| (16 b) ──► lut_addr_gen ──► 4 x 4-bit addresses
                  │ sign                                        │
                  │                       ┌─────────┬───────────┼─────────┐
                  │                     vf_lut0   vf_lut1     vf_lut2   vf_lut3     (16 x 0.18 each)
                  │                       └── x ────┘           └─── x ───┘         tree level 1 (0.16)
                  │                              └────── x ───────┘                  tree level 2 → f_x (0.16)
                  │                                      │
                  │                              fx_operand_prep
                  │                    num = (1-f_x)/2   │   den = (1+f_x)/2  ∈ [0.5, 1)
                  │                           │          ▼
                  │                           │     nr_reciprocal: seed LUT → 3 x (x·(2 − d·x))
                  │                           │          │ 1/den (2.16)
                  │                           └──── x ───┘   final multiplier → tanh|x| (0.15)
                  │                                 │
                  └──────────────────────► tanh_sign_restore (negate if sign, sign-extend)
                                                    │
                                                    ▼ y (s.15)
```

The steps, with their default widths:

1. **Sign and magnitude** (`tanh_abs`). The magnitude is kept as a 16-bit
   unsigned number. This keeps the most negative input, -8.0, exact: its
   magnitude is the single bit `2^3`.
2. **Velocity-factor lookup** (`lut_addr_gen`, `vf_lut`). The 16 magnitude bits
   are split into four groups of four. Each group addresses a 16-entry ROM,
   which holds the product of the factors of any subset of its four bits. Bit
   patterns 0000, 0001, ... give 1.0, the factor of one bit, and so on.
   Entries are 18-bit fractions (0.18).
3. **Multiplier tree** (`vf_mult_tree`). Three multipliers form
   `f_x = f0·f1·f2·f3`. Each product is truncated to a 16-bit fraction.
4. **Numerator and denominator** (`fx_operand_prep`). Both are halved, which
   cancels in the quotient. The denominator `(1 + f_x)/2` is the bit
   concatenation `{1, f_x[15:1]}`, so it needs no adder, and it always lies in
   [0.5, 1). That is exactly the range Newton-Raphson needs. The numerator
   `(1 - f_x)/2` is made with a 1's complement, `~f_x`: inverters instead of a
   subtractor, at a cost of one LSB of `f_x`.
5. **Reciprocal** (`nr_reciprocal`). A 4-entry seed table is followed by three
   unrolled iteration units `x ← x·(2 − d·x)`. Each unit has two multipliers,
   and `2 − d·x` is a 2's complement.
6. **Final multiplier**. `tanh|x| = num · (1/den)`, truncated to 15 fraction
   bits and clamped below 1.0.
7. **Sign restore** (`tanh_sign_restore`). A multiplexer picks the result or
   its 2's complement, depending on the input's sign. The result is then
   sign-extended to the output width.

For |x| above about 5.55, tanh rounds to one at 15 fraction bits. No separate
saturation logic is needed there: `f_x` underflows to zero and the data path
itself returns the top code, 32766.

## Why the LUT bits are shuffled

Each LUT entry is rounded to 18 bits, and the rounding error that matters is
absolute, not relative. Suppose each LUT took four neighbouring bits. The LUT
holding the large place values (`2^0 .. 2^3`) would then hold only tiny numbers
such as `exp(-16)`. Most of its 18 bits would be leading zeros, and the product
would lose precision. The method therefore spreads large and small place values
over all four LUTs. LUT0 is addressed by `{x15, x8, x7, x0}`. The other three
continue the same pattern. For an `IN_W`-bit magnitude, address bits 3..0 of
LUT `l` are

    {x[IN_W-1-l], x[IN_W/2+l], x[IN_W/2-1-l], x[l]}

| LUT  | address bits (MSB first) | place values in s3.12          |
|------|--------------------------|--------------------------------|
| LUT0 | x15 x8  x7 x0            | 2^3  2^-4  2^-5  2^-12         |
| LUT1 | x14 x9  x6 x1            | 2^2  2^-3  2^-6  2^-11         |
| LUT2 | x13 x10 x5 x2            | 2^1  2^-2  2^-7  2^-10         |
| LUT3 | x12 x11 x4 x3            | 2^0  2^-1  2^-8  2^-9          |

The shuffle is only wiring. The LUT contents are not written out: they are
computed during elaboration (`tanh_pkg::vf_entry`). Entry `a` of LUT `l` is

    round( exp(-2 · Σ_{j : a[j]=1} 2^(bit(l,j) − FRAC_IN)) · 2^LUT_W )

clamped to `2^LUT_W − 1`, so that address 0 (1.0) fits. The exponential is
evaluated in 64-bit-fraction integer arithmetic. `exp(-2^e)` comes from a Taylor
series at a small argument, followed by repeated squaring. Changing
`IN_W`, `FRAC_IN` or `LUT_W` therefore regenerates the tables.

## The divider

Halving the denominator gives `d ∈ [0.5, 1)`. Its MSB is always one, and an
assertion in `nr_reciprocal` checks this. The two bits below the MSB pick one of
four sub-intervals `[lo, hi)` of `d`. The seed table returns `2/(lo+hi)`, as a
2.16 number. The relative error of that seed is at most 1/9.

Each Newton-Raphson step roughly squares the relative error: about 1.2e-2
after one step, 1.5e-4 after two, and below the 2^-16 word resolution after
three. The steps approach `1/d` from below. Truncation can leave a step one or
two LSBs above `1/d`, which the 2-integer-bit format holds.

With `ONES_COMP = 0` the numerator is the exact 2's complement `2^16 − f_x`.
The two variants give the same worst case (table below). The 1's complement is
the default because it needs no carry chain.

## Pipelining and interface

```
clk, rst_n        rst_n: synchronous, active low; clears all valid bits and registers
in_valid, x       one input per clock, no back-pressure
out_valid, y      y is valid when out_valid is high
```

`PIPE_MASK` (7 bits) chooses where registers go. Each bit adds one clock of
latency:

| bit | register after                         |
|-----|----------------------------------------|
| 0   | LUT read                               |
| 1   | first multiplier level                 |
| 2   | `f_x` (end of the tree)                |
| 3-5 | Newton-Raphson steps 1, 2, 3           |
| 6   | sign restore (output register)         |

The method was evaluated at three depths. This design realises them as
follows: `7'b1111111` gives latency 7 (the default), `7'b1000100` gives
latency 2, and `7'b1000000` gives latency 1. A bit whose stage does not exist
adds no register. Examples are bit 5 with `NR_ITERS = 2`, and bits 3 and 4
with `NR_ITERS = 1`. Bit 2 behind a one-level tree (8-bit input) adds a
register with no logic in front of it. Every stage carries the input sign (and,
in the divider, the numerator) along with the data.

## Parameters

| parameter   | default     | meaning |
|-------------|-------------|---------|
| `IN_W`      | 16          | input width; a multiple of 4, giving `IN_W/4` LUTs. The tree needs a power of two, so 8, 16 or 32 |
| `FRAC_IN`   | 12          | input fraction bits (s3.12) |
| `FRAC_OUT`  | 15          | output fraction bits (s.15) |
| `OUT_W`     | 16          | output word; more than `FRAC_OUT+1` bits are sign extension |
| `LUT_W`     | 18          | LUT entry width (0.LUT_W) |
| `MUL_W`     | 16          | multiplier result and divider word width |
| `NR_ITERS`  | 3           | Newton-Raphson steps, 1 to 3 |
| `SEED_BITS` | 2           | seed table address bits (2^SEED_BITS entries) |
| `ONES_COMP` | 1           | 1: numerator by 1's complement, 0: exact 2's complement |
| `PIPE_MASK` | `7'b1111111`| register positions, see above |

For the 8-bit case (s3.5 in, s.7 out), set `IN_W=8, FRAC_IN=5, FRAC_OUT=7,
OUT_W=8`. The method does not give LUT and multiplier widths for it. The
tests use `LUT_W=10, MUL_W=8`, which gives 2 LUTs and one tree multiplier.

## Accuracy

Every input code was swept and compared with double-precision tanh. The
reference numbers are those reported for the method, which used the same
widths.

| configuration (s3.12 → s.15, LUT 18 b, multipliers 16 b) | max error, this RTL | reported for the method |
|---|---|---|
| 3 NR steps, 1's complement (default) | 6.46e-5 | 4.32e-5 |
| 3 NR steps, 2's complement           | 6.46e-5 | 4.44e-5 |
| 2 NR steps, 1's complement           | 1.93e-4 | 2.77e-4 |
| 2 NR steps, 2's complement           | 1.64e-4 | 2.56e-4 |
| s3.5 → s.7, 3 NR steps, 1's / 2's complement | 1.22e-2 / 7.3e-3 | — |

With three steps the error is about 2.1 LSB of s.15. The method reports about
1.4 LSB. The gap comes from rounding details that the method does not specify.
This RTL truncates every product and reads "16-bit multipliers" as 16-bit
product words. Rounding the final product instead of truncating it was tried
in a bit-exact model and made the error larger (7.5e-5). The pipeline depth
does not change the results.

## Own choices and departures

These follow the method as described:

* the velocity-factor formulation;
* four 16-entry LUTs, with LUT0 addressed by `{x15, x8, x7, x0}`;
* the three-multiplier tree;
* the halved numerator and the concatenated, halved denominator;
* the 1's complement numerator;
* three Newton-Raphson stages and the final multiplier;
* the abs / negate / multiplex / sign-extend sign path;
* 18-bit LUTs and 16-bit multipliers;
* pipeline depths of 1, 2 and 7.

These were chosen here:

* **LUT1-LUT3 bit groups.** Only LUT0 is specified. The other groups extend its
  pattern. The text also names LUT0's place values as `2^-12, 2^-5, 2^-4, 2^2`.
  That does not match bit x15 of an s3.12 magnitude, which is `2^3`. The RTL
  follows the bit list.
* **1.0 in the LUTs** is stored as `1 − 2^-18`, because 0.18 cannot hold 1.0.
* **Truncation everywhere**, plus a final clamp below 1.0. The clamp was never
  reached in any swept configuration and is kept as a safeguard.
* **Seed table.** The method only says that a LUT gives the first guess. Its
  size (4 entries) and contents (`2/(lo+hi)`) are chosen here.
* **Register positions** for each pipeline depth, the valid-only handshake and
  the synchronous reset.
* **No explicit input-domain check.** Beyond |x| ≈ 5.55 the data path itself
  returns the top code.

The method's own starting point is not built. That earlier scheme stores
factors only down to `2^-7` and corrects the remaining bits with
`b·(1 − tanh²)`. The accuracy, area and frequency results reported for the
method come from a standard-cell library and cannot be reproduced from this
RTL.

## Files

`rtl/` holds one module or package per file:

| file | role |
|------|------|
| `tanh_pkg.sv`          | shared elaboration-time functions: LUT bit map, factor tables, seed values |
| `tanh_unit.sv`         | top: abs → core → sign restore → output register |
| `tanh_abs.sv`          | sign and 16-bit magnitude |
| `tanh_core.sv`         | tanh of the magnitude, the whole factor/divider path |
| `lut_addr_gen.sv`      | bit shuffle into LUT addresses |
| `vf_lut.sv`            | one 16-entry velocity-factor ROM |
| `vf_mult_tree.sv`      | multiplier tree, optional registers |
| `fx_operand_prep.sv`   | halved numerator and denominator |
| `nr_reciprocal.sv`     | seed plus Newton-Raphson chain, optional registers |
| `nr_seed_lut.sv`       | seed table |
| `nr_iter_unit.sv`      | one Newton-Raphson step |
| `frac_mult.sv`         | truncating fixed-point multiplier |
| `tanh_sign_restore.sv` | negate, select, sign-extend |
| `pipe_stage.sv`        | optional register for a valid/data pair |

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M`. Expected values are computed
independently, with integer or real arithmetic, and latencies are checked
where a module has registers. Three testbenches go beyond single modules:

* `tb_tanh_unit` runs the top at its default parameters. It applies all 65536
  input codes in random order, with idle cycles. It checks the error bound, the
  7-clock latency and odd symmetry, and it checks a pipeline flush by reset. It
  counts that the sign path, the most negative code, the saturated region,
  bubbles and back-to-back inputs all occurred.
* `tb_tanh_configs` uses the helper `tanh_sweep.sv`. It sweeps the
  Newton-Raphson and subtractor variants, the three pipeline depths, and the
  8-bit format, and prints the error of each.
* `tb_tanh_core` sweeps every magnitude through the core alone.

## Simulating

With Verilator 5 (two-state simulation, run from the directory that holds
`rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/tanh_pkg.sv tb/tb_tanh_unit.sv \
          --top-module tb_tanh_unit -Mdir obj_tanh -o sim
./obj_tanh/sim
```

Use the same command for any other testbench, with its name in place of
`tb_tanh_unit`. The package has to come first on the command line. The other
modules are found through `-Irtl`/`-Itb`. Each sweep takes well under a second.
To lint the RTL alone:

```
verilator --lint-only -Wall -Irtl rtl/tanh_pkg.sv rtl/tanh_unit.sv
```

The only warning left is that `nr_seed_lut` reads two bits of its
denominator input. It takes the whole word so that its port matches the
divider's.
