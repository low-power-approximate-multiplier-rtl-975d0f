# An 8×8 approximate multiplier built almost entirely from one-error 4:2 compressors

Neural-network inference spends most of its energy in multiplications, and it
tolerates small arithmetic errors. This design is an 8-bit × 8-bit unsigned
multiplier that gives up a little accuracy for a simpler reduction tree. Its
main idea lies in the 4:2 compressor used to add up the partial products.

A 4:2 compressor takes four bits of the same weight. An *exact* one also needs
a carry in and a carry out, and those carries chain the compressors of a row
together. An *approximate* one drops the chain and reports the count on two
bits (Carry, Sum), so it can say at most 3. The compressor here is wrong for
only one input pattern, 1111, which it reports as 3. A partial-product bit is 1
with probability 1/4, so that pattern occurs with probability 1/256. Because
the error is so rare, the multiplier can use the approximate compressor almost
everywhere. There is no truncation and no error-correction logic. Exact cells
remain only at the top end of the tree. The result is a product that is exact
for 93 % of operand pairs, and otherwise a little too small.

Everything is combinational: operands in, product out, no clock.

## The compressor (`approx_comp42`)

First each input pair is classified with one NOR and one NAND:

    A = ~(x1 | x2)   B = ~(x1 & x2)      C = ~(x3 | x4)   D = ~(x3 & x4)

For a pair, `A` means "no bit set", `~B` means "both set" and `~A & B` means
"exactly one set" (the same holds for C and D). With these:

    Carry = ~(B & D) | ~(A | C)                                   count >= 2
    Sum   = ~A&B&C | ~A&B&~D | A&~C&D | ~B&~C&D | ~B&~D           count 1, 3 or 4

| x4 x3 x2 x1 set | exact | Carry Sum | reported |
|---|---|---|---|
| 0 | 0 | 0 0 | 0 |
| 1 | 1 | 0 1 | 1 |
| 2 | 2 | 1 0 | 2 |
| 3 | 3 | 1 1 | 3 |
| 4 | 4 | 1 1 | **3** |

The compressor is a symmetric function of its inputs, so it does not matter
which wire carries which bit.

**A correction to the published equation.** In the published form of the Sum
equation, the third product term reads `~A & ~C & D`, not `A & ~C & D`. Taken
literally, it makes Sum 1 for some inputs with two ones (e.g. x1 = x3 = 1).
It also makes Sum 0 when x1 = x2 = 0 and one of x3, x4 is set. Both
contradict the published truth table. The RTL follows the truth table, and the
unit testbench checks all 16 rows against it.

The published gate-level drawing ends in an AO222 cell. The RTL does not copy
that netlist. It states the sum of products and leaves the choice of cells to
synthesis.

## The reduction tree (`approx_mult8x8`)

The 64 partial products `pp[i][j] = a[j] & b[i]` sit in columns `k = i + j`
(0..14). The column heights are 1, 2, ..., 8, ..., 2, 1. Two stages bring the
height from 8 down to 4 and then to 2. A final adder sums the two remaining
rows. "AC" is the approximate compressor, "EC" the exact 4:2 compressor, "HA"
and "FA" exact half and full adders.

Stage 1 (8 → 4). The bits each cell takes are given as partial-product rows `i`:

| column | cells (rows i) | passed through |
|---|---|---|
| 0–3 | – | all |
| 4 | HA (0,1) | 2, 3, 4 |
| 5 | AC (0–3) | 4, 5 |
| 6 | AC (0–3), HA (4,5) | 6 |
| 7 | AC (0–3), AC (4–7) | – |
| 8 | AC (1–4), FA (5–7) | – |
| 9 | AC (2–5), HA (6,7) | – |
| 10 | AC (3–6) | 7 |
| 11 | HA (4,5) | 6, 7 |
| 12–14 | – | all |

After stage 1, columns 3 to 12 hold exactly four bits each. Column 2 holds
three, column 13 two, and column 14 one.

Stage 2 (4 → 2):

| column | cell |
|---|---|
| 0, 1 | – |
| 2 | HA on two of the three bits |
| 3 … 10 | AC on all four bits |
| 11 | EC, cin = 0 |
| 12 | EC, cin = cout of column 11 |
| 13 | FA on the two bits plus cout of column 12 |
| 14 | – |

Each cell's sum bit stays in its column; each carry and cout move one column
to the left. The two rows handed to `final_adder` are `row0` (the sum bits and
pass-through bits) and `row1` (the carries). Bit 0 of `row1` is always 0.

Why the tree is mostly approximate: the approximate compressors cover columns
3 to 10 in both stages. Exact cells are used only where a column has too few
bits for a compressor (the half and full adders). The exception is the two
exact compressors, which sit in columns 11 and 12 of stage 2. The published
diagram marks columns 11 to 14 as the "exact region".

The assignment of partial-product rows to the stage-1 cells matters. The error
happens only when one particular group of four bits is all ones, so a
different grouping gives different error statistics. The grouping above was
read from the published dot diagram. Two things confirm it. It reproduces the
published error figures exactly: 4548 wrong products over the 255 × 255 nonzero
operand pairs. And in stage 2 every compressor takes its whole column, so the
order of bits there cannot matter.

## Error behaviour

* **The error is one-sided.** Each compressor that sees 1111 in column k
  removes exactly 2^k, so the product is never too large.
* The largest error is 3592, at 255 × 255, which gives 61433 instead of 65025.
* Over operands 1..255 (65025 pairs), 4548 products are wrong:

  | metric | this RTL | published |
  |---|---|---|
  | error rate | 6.994 % | 6.994 % |
  | mean error distance / 255² | 0.046 % | 0.046 % |
  | mean relative error distance | 0.1097 % | 0.109 % |

  The published mean relative error looks truncated rather than rounded.
  Counting operand 0 as well (all 65536 pairs), the error rate is 6.940 %.
  The published figures therefore correspond to nonzero operands.

## Modules

| file | what it is |
|---|---|
| `rtl/mult_pkg.sv` | widths and types (`operand_t`, `product_t`, `row_t`, `pp_array_t`) |
| `rtl/approx_comp42.sv` | the one-error approximate 4:2 compressor (`x[3:0]` → `carry`, `sum`) |
| `rtl/exact_comp42.sv` | exact 4:2 compressor from two full adders (`x`, `cin` → `cout`, `carry`, `sum`); `cout` does not depend on `cin` |
| `rtl/half_adder.sv`, `rtl/full_adder.sv` | exact adder cells |
| `rtl/pp_gen.sv` | 64-AND partial-product array |
| `rtl/final_adder.sv` | 15-bit + 15-bit → 16-bit carry-propagate adder (behavioural `+`) |
| `rtl/approx_mult8x8.sv` | the multiplier: `a`, `b` (8 bits each) → `p` (16 bits) |

The tree is hand-placed for 8-bit operands, so there is no width parameter.
The synthesised netlist (generic gates) has about 490 cells plus a 16-bit adder.

## What follows the published design and what does not

Taken from the published design:

* the compressor's truth table and its NOR/NAND decomposition, with the Sum
  equation corrected as explained above;
* the exact 4:2 compressor built from two full adders;
* the placement of every cell in both reduction stages.

Choices made here, where the published description is silent:

* **The final adder.** Only the two final rows are shown, so it is written as
  a plain `+` and synthesis picks the adder architecture.
* **No pipeline registers.** The multiplier is a single combinational path.
* **Exact compressors in columns 11 and 12.** The prose says the multiplier
  uses only approximate compressors, but the dot diagram draws exact ones in
  those two columns of stage 2. The diagram is followed. The published
  error rate agrees with it: approximate compressors in those two columns
  would raise the error rate over operands 1..255 from 6.994 % to 8.881 %.
* **What is not modelled.** The published power, delay and energy figures
  come from a 90 nm standard-cell synthesis and are not modelled. The
  published designs this multiplier is compared against are not included.

## Use in a convolution layer

The multiplier was published as the arithmetic inside convolution layers of
networks for handwritten-digit recognition (a small Keras CNN and LeNet-5)
and image denoising (FFDNet). Those layers exist only in software there, with
no hardware architecture, so no convolution engine is given here.
`tb/tb_conv_workload.sv` shows the multiplier doing that job:

* The layer has the size of the Keras network's convolution: a 28×28 8-bit
  image, one 3×3 filter of 8-bit unsigned weights and zero padding, followed
  by 2×2 max pooling. The 3×3 kernel size is this test's choice.
* All 6724 products go through `approx_mult8x8`.
* 126 of those products are wrong. The mean relative error of the feature map
  is 0.05 %, its PSNR against the exact map is about 77 dB, and max pooling
  picks the same pixel in all 196 windows.

The weights and image are generated, since trained networks are not part of
this design. To use the multiplier in a network, quantise activations and
weights to 8-bit unsigned values; signed data needs sign handling outside it.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

* `tb_approx_comp42`: all 16 inputs against the truth table. It also checks
  that exactly one pattern is wrong.
* `tb_exact_comp42`: all 32 inputs. It checks that
  `x1+x2+x3+x4+cin == sum + 2(carry+cout)` and that `cout` ignores `cin`.
* `tb_half_adder`, `tb_full_adder`: exhaustive.
* `tb_pp_gen`: all 65536 operand pairs. It checks each bit and the weighted
  sum.
* `tb_final_adder`: corner cases and 20000 random pairs.
* `tb_approx_mult8x8`: all 65536 operand pairs.
  * Each product is compared bit for bit with an independent reference model,
    `tb/mult_ref_pkg.sv`. That model does column-by-column bit bookkeeping
    rather than copying the netlist.
  * Each product is checked to be no larger than `a*b`.
  * The three error metrics are compared with the published values.
  * It counts that stage-1 and stage-2 saturations happen, and that the
    column-11→12 and column-12→13 carry links are exercised.
* `tb_conv_workload`: the convolution described above.

Running one testbench with plain Verilator (from the directory that holds
`rtl/` and `tb/`):

    verilator --binary --timing --assert -Wno-fatal \
      rtl/mult_pkg.sv tb/mult_ref_pkg.sv rtl/half_adder.sv rtl/full_adder.sv \
      rtl/approx_comp42.sv rtl/exact_comp42.sv rtl/pp_gen.sv rtl/final_adder.sv \
      rtl/approx_mult8x8.sv tb/tb_approx_mult8x8.sv --top-module tb_approx_mult8x8
    ./obj_dir/Vtb_approx_mult8x8

Every testbench runs in well under a second.

If you change the tree, two things help. The reference model in
`mult_ref_pkg` describes the tree column by column and has to change with it.
The error-metric checks in `tb_approx_mult8x8` then tell you how far the new
placement moves the error rate.
