# Two-stage 8×8 approximate multipliers built on a multicolumn 3,3:2 inexact compressor

A column-compression multiplier spends most of its delay in partial-product
reduction: an 8×8 array has up to eight bits per column, and single-column
compressors (full adders, 4:2 cells) need three or more stages before a final
carry-propagate adder can run. These multipliers reduce **two adjacent columns
at once** with an inexact *multicolumn* compressor. It takes three bits from
column k+1 and three from column k and returns just one bit per column plus a
carry to its neighbour. With it, the whole 8×8 array is brought down to the
16-bit product in **two stages**, and the second stage already emits product
bits, so no separate final adder is needed. Exact cells are kept where errors
would be costly: an exact 4:2 chain in the high columns of stage 1 and a short
ripple-carry adder in the high columns of stage 2.

The RTL follows the design published by Karimi, Faghih Mirzaee, Fakeri-Tabrizi
and Roohi ("Ultra-Fast, High-Performance 8x8 Approximate Multipliers by a New
Multicolumn 3,3:2 Inexact Compressor and its Derivatives"). It provides both
multipliers proposed there:

* **Design #1** (`approx_mult_d1`): the more accurate one, with no truncation.
* **Design #2** (`approx_mult_d2`): the same high-order structure, but
  columns 0–6 keep a single partial product each. Columns 1–6 are the six
  truncated columns; column 0 has only one partial product anyway. It is
  smaller and faster, and less accurate.

Both are unsigned 8×8 → 16-bit and purely combinational. `approx_mult_top`
drives both from one operand pair.

## The multicolumn compressor

`mc_compressor #(NB, NA, HAS_CIN)` has inputs `b` (NB bits of weight
2^(k+1)), `a` (NA bits of weight 2^k) and an optional `cin` (weight 2^k). It
has three outputs:

```
   b1 b2 b3 (2^(k+1))      a1 a2 a3 (2^k)
       |                        |
    [adder B]               [adder A]
   sum_B  carry_B         sum_A   carry_A
  (2^k+1) (2^k+2)         (2^k)   (2^k+1)
     |       |              |        |
     |       +--> cout      +--[HA]--+-- cin
     |          (2^(k+2))      |  \
     |                         |   carry_HA (2^(k+1))
     |                        sum (2^k)
     +-------- OR(sum_B, carry_A, carry_HA) --> carry (2^(k+1))
```

An adder with three inputs is a full adder, with two a half adder, and with
one it is a wire. `HAS_CIN = 0` removes the half adder on `cin`. The
approximation is the OR. Three signals of weight 2^(k+1) are merged into one
bit instead of being added, so when two or three of them are 1 the result
falls 2 or 4 short. The output is never above the exact sum. For the full
3,3:2 cell this happens in 48 of the 128 input patterns. `cout` comes only
from the column-(k+1) adder and never depends on `cin`, so compressors chained
`cout → cin` along a row do not ripple.

The carry gate is only drawn in the paper, not named. OR is the gate its
published truth table requires, and the testbench checks all 32 rows of that
table. The smaller variants ("derivatives") follow the rule the paper gives
for the 2,2:2 cell: replace full adders by half adders (and, one step
further, by wires). The paper shows their insides only as pictures. The rule
reproduces every published normalised error distance, NED = mean |error| /
largest possible input sum:

| variant (NB,NA:2)   | NB | NA | cin | NED (RTL, exhaustive) | published |
|---------------------|----|----|-----|-----------------------|-----------|
| 3,3:2               | 3  | 3  | yes | 0.08125               | 0.08125   |
| 3,3:2 without Cin   | 3  | 3  | no  | 0.05556               | 0.0555    |
| 3,2:2 without Cin   | 3  | 2  | no  | 0.03125               | 0.03125   |
| 2,3:2               | 2  | 3  | yes | 0.10156               | 0.10156   |
| 2,2:2               | 2  | 2  | yes | 0.07143               | 0.07143   |
| 1,3:2               | 1  | 3  | yes | 0.13542               | 0.13542   |
| 1,2:2               | 1  | 2  | yes | 0.1                   | 0.1       |
| 1,2:2 without Cin   | 1  | 2  | no  | 0.0625                | 0.0625    |

## Design #1, column by column

Notation: `p[i][j] = a[i] & b[j]` sits in column i+j. "X,Y:2 @ m,k" is a
compressor taking X bits of column m = k+1 and Y bits of column k. Arrows are
`cout → cin` links.

**Stage 1** splits the array into two groups of cells:

```
upper group:  1,2:2 w/o Cin @ 8,7
              3,2:2 w/o Cin @ 6,5 → 3,3:2 @ 8,7 → 1,3:2 @ 10,9
lower group:  HA (col 3, its carry is the next Cin)
              → 3,3:2 @ 5,4 → 3,3:2 @ 7,6 → 3,3:2 @ 9,8
              → exact 4:2 (col 10) → exact 4:2 (col 11)
              → exact 4:2 with 3 inputs (col 12) → exact FA (col 13)
untouched:    col 0 (1 bit), 1 (2), 2 (3), 3 (2 of 4), 4 (2 of 5),
              5 (1 of 6), 6 (1 of 7), 14 (1)
```

After stage 1, columns 0–8 hold at most three bits and columns 9–14 hold two.

**Stage 2** produces the product directly:

```
F0        = p[0][0]
F2,F1     = 3,2:2 w/o Cin @ 2,1
F4,F3     = 3,3:2 @ 4,3      (Cin from the cell @ 2,1)
F6,F5     = 3,3:2 @ 6,5      (Cin from @ 4,3)
F8,F7     = 3,3:2 @ 8,7      (Cin from @ 6,5)
F15..F9   = 6-bit ripple-carry adder over columns 9..14, carry-in = Cout of @ 8,7
```

Every cell in columns 10 and up, in both stages, is exact. The only error in
the top byte of the product is the carries lost below column 9. The four
precise stage-1 cells (columns 10–13) are why this placement was chosen in the
paper. It compared chains of one to seven precise cells and found four the
best trade-off of power, delay, area and error.

## Design #2: truncating the low columns

Columns 0–6 are not reduced at all. Each keeps one partial product, which
becomes the product bit directly (`F[k] = a[k] & b[0]` here). The other 21
partial products of those columns are never formed. Above that:

```
stage 1:  1,2:2 w/o Cin @ 8,7
          3,3:2 w/o Cin @ 8,7 → 1,3:2 @ 10,9
          exact FA (col 7, its carry is the next Cin) → 3,3:2 @ 9,8
          → exact 4:2 (10) → exact 4:2 (11) → exact 4:2, 3 inputs (12) → FA (13)
stage 2:  F8,F7 = 3,3:2 w/o Cin @ 8,7;  F15..F9 = ripple-carry adder, as in Design #1
```

## Accuracy

Measured exhaustively over all 65,536 operand pairs (error distance ED =
exact − approximate; it is never negative):

| metric                      | Design #1 (RTL) | published | Design #2 (RTL) | published |
|-----------------------------|-----------------|-----------|-----------------|-----------|
| mean error distance (MED)   | 353.7           | 297.9     | 428.5           | 409.7     |
| NED (MED / 255²)            | 5.44e-3         | 4.58e-3   | 6.59e-3         | 6.30e-3   |
| error rate                  | 66.95 %         | 66.9 %    | 94.45 %         | 94.5 %    |
| largest ED                  | 4240            | –         | 4226            | –         |

The error rates agree closely. The MEDs differ because the paper does not
say which partial product goes to which compressor input. Inside one column
all partial products have the same weight, but they share operand bits with
bits in other columns, so the assignment changes the correlation between
compressor inputs and with it the error. The RTL reads the dot diagrams with
the usual convention: the dots of column c are stacked at the bottom of the
eight-row diagram, ordered by the b index from top to bottom, so every box in
the figures covers a definite set of `a[i] & b[j]`. Under the same convention
the dot that Design #2 keeps in truncated column k is `a[k] & b[0]`. Other
assignments of the same Design #1 placement give MEDs from about 290 to 351.

In the image-sharpening application (unsharp masking S = I + 1.5(I − B) with
a 5×5 Gaussian blur B), the bundled workload uses a generated 384×284 image.
The sharpened output has a PSNR against exact multiplication of 26.80 dB
(Design #1) and 22.82 dB (Design #2). The paper's averages over six
photographs are 28.29 dB and 22.47 dB.

## Where this RTL goes beyond the paper

Which parts are the paper's and which are filled in here:

* **From the paper:** the compressor structure and derivatives, the placement
  of every cell in both designs, the cout→cin links, and the ripple-carry
  adder over columns 9–14.
* **Partial-product assignment:** not printed; the RTL reads the dot
  diagrams with the bottom-stacked convention described under Accuracy. The
  bits each cell takes are listed per instance in `approx_mult_d1.sv` and
  `approx_mult_d2.sv`. The assignment is the one
  thing to change in order to explore MED. The testbenches' reference totals
  would then need recomputing.
* **Carry gate of the compressor:** drawn but not named; OR, from the truth
  table.
* **Exact 4:2 compressor:** only named. The usual two-full-adder cell is used,
  with `cout` independent of `cin`.
* **Timing:** the paper describes a combinational circuit with no registers.
  Nothing is added: no clock, reset or pipeline stage. Its delay, power and
  area figures come from a 45 nm library and are not reproduced here.
* **`approx_mult_top`:** the paper presents two alternative multipliers. The
  top exists only to hold both. Use `approx_mult_d1` or `approx_mult_d2` on
  its own in a real system.

The structure is fixed at 8×8. The modules have no width parameter because
the cell placement does not scale. The generic pieces (`mc_compressor`,
`rca`, `pp_gen`) are parameterised.

## Files

| file | contents |
|------|----------|
| `rtl/approx_mult_pkg.sv` | operand, product and partial-product-array types |
| `rtl/half_adder.sv`, `rtl/full_adder.sv` | exact cells |
| `rtl/exact_4to2.sv` | exact 4:2 compressor |
| `rtl/mc_compressor.sv` | multicolumn NB,NA:2 inexact compressor and derivatives |
| `rtl/rca.sv` | W-bit ripple-carry adder |
| `rtl/pp_gen.sv` | AND-array partial-product generation |
| `rtl/approx_mult_d1.sv`, `rtl/approx_mult_d2.sv` | the two multipliers |
| `rtl/approx_mult_top.sv` | both multipliers on one operand pair |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_sharpen.sv` | image-sharpening workload on both multipliers |

Hierarchy: `approx_mult_top` → `approx_mult_d1`, `approx_mult_d2` → `pp_gen`,
`mc_compressor`, `exact_4to2`, `full_adder`, `half_adder`, `rca`.

## Testbenches

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog fails the run if the stimulus hangs.

* `tb_half_adder`, `tb_full_adder`, `tb_exact_4to2`, `tb_rca`, `tb_pp_gen`:
  exhaustive arithmetic checks. The 4:2 test also checks that `cout` ignores
  `cin`.
* `tb_mc_compressor`: all eight variants, with the 3,3:2 truth table, the 48
  wrong patterns, error magnitudes of 0/2/4, and each variant's NED against
  the published value.
* `tb_approx_mult_d1`, `tb_approx_mult_d2`: all 65,536 operand pairs,
  compared as totals (sum of |ED|, error count, sum of products, largest ED,
  and an order-sensitive hash of all products). The totals come from an
  independent bit-level model. Also checked: the error rate and MED against
  the published figures, and a few spot products.
* `tb_approx_mult_top`: all operand pairs through the top, with hashes of both
  outputs. It counts every mechanism (compressor error, truncation, cout→cin
  carry into the exact chain, 4:2 chain carry into column 13, carry into the
  ripple adder, Design #2's column-7 FA carry, product bit 15) and fails if
  one never occurs.
* `tb_sharpen`: the sharpening workload above. Its squared-error sums and the
  exact image's checksum are checked against an independent model.

Run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Irtl rtl/approx_mult_pkg.sv tb/tb_approx_mult_top.sv \
          --top-module tb_approx_mult_top -Mdir obj_top
./obj_top/Vtb_approx_mult_top
```

Verilator finds the other modules in `rtl/` by file name. Every testbench
finishes in a few seconds. For a lint of the design alone:

```
verilator --lint-only -Wall -Irtl rtl/approx_mult_pkg.sv rtl/approx_mult_top.sv
```

Lint reports unused signals and nothing else. The `cout` of the 1,X:2 cells
is always 0 and left open, and the variants without Cin ignore their `cin`
port.
