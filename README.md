# Trained-structure approximate array multiplier

Multipliers take a large share of the power of a neural-network
accelerator. One way to save that power is an *approximate multiplier* (AxM): a
multiplier with some of its internal signals tied to a constant. The logic that
drove those signals is then gone, and the product is a little wrong on some
inputs. Which signals to remove is usually chosen by looking at a local error
figure, such as the error rate, under uniformly distributed inputs. The
approach implemented here chooses them differently. Each low-order column of
the multiplier gets a continuous *structure parameter* θ_c in [0, 1]. The
θ_c are trained together with the network's weights, against the network's own
loss plus a weighted power estimate. A greedy mapping step then turns the
trained θ values into a concrete set of signals tied to 0.

This RTL is the hardware result of that flow: an unsigned B×B array
multiplier whose structure, meaning the set of removed signals, is fixed by
parameters. Training, the power estimate and the mapping search run in
software and are not part of the RTL. A SystemVerilog copy of the mapping
search is included in the testbench package. It re-derives the default
structure and checks it.

## Files

| file | contents |
|---|---|
| `rtl/tram_pkg.sv` | mask type `cand_mask_t`, the constants `NO_APPROX`, `INIT_ZERO_SUM` and `INIT_ZERO_CARRY` |
| `rtl/tram_ha.sv` | half adder cell |
| `rtl/tram_fa.sv` | full adder cell |
| `rtl/tram_axm.sv` | the approximate array multiplier (top) |
| `tb/tb_axm_ref_pkg.sv` | software models: bit-level array, closed-form target, greedy mapping |
| `tb/tb_tram_ha.sv`, `tb/tb_tram_fa.sv` | exhaustive cell tests |
| `tb/tb_tram_axm.sv` | eight structures, every 8-bit input pair |
| `tb/tb_tram_axm_full.sv` | default multiplier: re-derives its structure and checks all products |
| `tb/tb_tram_axm_workloads.sv` | the 4-bit/P=4 and 8-bit/P=6 settings, and one case of partial approximation |

## The array

The multiplier forms B² partial products, pp_ij = w_i AND x_j. It sums them
column by column: column c holds every pp_ij with i + j = c, and the exact
product is W·X = Σ_c S_c·2^c, where S_c is the number of ones in column c.
The partial products are reduced by a carry-ripple array of half adders (HA)
and full adders (FA). Row 0 is just the partial products pp_0j. Each further
row r = 1 … B−1 adds w_r·X to the running sum. Position k of row r sits in
column r + k:

```
column  c7       c6       c5       c4       c3       c2       c1       c0
row 0                                       pp03     pp02     pp01     pp00
row 1                              HA:pp13  FA:pp12  FA:pp11  HA:pp10
row 2                     FA:pp23  FA:pp22  FA:pp21  HA:pp20
row 3            FA:pp33  FA:pp32  FA:pp31  HA:pp30
bit     Y7       Y6       Y5       Y4       Y3       Y2       Y1       Y0
```

The drawing shows B = 4. Each entry names a cell and the partial product it
adds. Carries move one column to the left within a row. Each cell's sum
goes down to the next row in the same column. Y_r, for r = 1 … 3, is the
sum of the first cell of row r; Y_4 … Y_7 come from row 3.

* Position 0 of every row is an HA. It adds the running-sum bit of column r
  and pp_r0, and it has no carry in.
* Positions 1 … B−2 are FAs. Each adds the running-sum bit, pp_rk and the
  carry from position k−1.
* Position B−1 is an HA in row 1, because nothing from row 0 reaches column B.
  In later rows it is an FA, whose running-sum input is the last carry of the
  row above.
* Product bits: Y_0 = pp_00, Y_r = sum of row r position 0 for r < B, and
  Y_{B−1+k} = sum of row B−1 position k. The top bit Y_{2B−1} is the last
  carry of row B−1.

For B = 4, column 2 holds three AND gates, one FA and one HA, which matches
the array drawn in the source paper. The cells are written behaviourally
(`{c,s} = a + b`). The RTL fixes no gate structure for them.

## Removing signals: the three masks

The structure of an approximate multiplier is three parameters of type
`cand_mask_t`. That type is a 16×16 packed bit array indexed `[row][position]`
(or `[i][j]` for partial products):

| parameter | a set bit ties to 0 … | column |
|---|---|---|
| `ZERO_SUM[r][k]` | the sum output of cell (r, k) | r + k |
| `ZERO_CARRY[r][k]` | the carry output of cell (r, k) | r + k |
| `ZERO_PP[i][j]` | partial product pp_ij | i + j |

A signal counts as part of the column of the cell that produces it. For
example, the carry leaving the column-2 FA belongs to column 2, although it
feeds column 3. Only columns 0 … P−1 can be approximated. Mask bits in higher
columns are ignored, so P = 0 always gives the exact multiplier. The cell
driving a removed output stays in the RTL. The output is simply not used, and
synthesis deletes whatever logic no longer reaches a product bit. A tied sum
feeds 0 into the cell below it. A tied carry feeds 0 into the next cell of the
same row.

The mapping step described below only uses compressor outputs (`ZERO_SUM` and
`ZERO_CARRY`). `ZERO_PP` covers the partial products, which the source also
names as possible candidates. By default it is empty.

## From structure parameters to a structure

During training, the effect of θ is modelled in closed form. Removing a
fraction θ_c of column c is taken to subtract θ_c·S_c·2^c from the product:

    Y_ref = W·X − Σ_{c<P} θ_c · S_c · 2^c

θ_c = 0 keeps a column exact. θ_c = 1 drops the whole column. This target is
what the hardware should imitate. The mapping builds the imitation greedily:

1. Start from the exact array.
2. Visit columns 0, 1, …, P−1 in order. In each column, take the cells from
   the top row down. For each cell, try tying its sum to 0, then its carry.
3. Keep a change only if it strictly lowers the mean squared error between
   the circuit's output and Y_ref over the input patterns. Otherwise undo it.

The result is always a working multiplier, because it starts from the exact
array and only removes signals. The order of cells inside a column, and the
use of all input pairs with equal weight, are choices of this implementation.
The original flow weights the search with the input patterns seen by the
network layer.

### The default structure

No trained structure is published, so the default is the mapping of the
search's *starting point*: θ_0 … θ_3 = 1 and θ_4 … θ_7 = 0, with B = 8 and
P = 8, over all 65,536 input pairs. The mapping ties nine outputs to 0:

| row | sums tied to 0 (positions) | carries tied to 0 (positions) |
|---|---|---|
| 1 | 0, 1, 2 | 0, 1, 2 |
| 2 | 0, 1 | — |
| 3 | 0 | — |

pp_00 is the only signal of column 0, and it is not a compressor output, so
column 0 stays exact. The resulting multiplier has these errors:

* error rate 80.86 %
* NMED 0.0183 %
* largest error 48
* mean error −12.0 (products come out 12 too small on average)

Its mean squared distance from Y_ref is 0.25. The exact product is 248.25 away
from Y_ref. Product bits Y_1 … Y_3 are constant 0 in this structure. With the
same starting point, P = 6 for B = 8 and P = 4 for B = 4 give the same masks.
For B = 4 the masks produce 207 wrong products out of 256.

To build another structure, pass masks as parameters, for example:

```systemverilog
tram_axm #(.B(8), .P(8),
           .ZERO_PP   (tram_pkg::NO_APPROX),
           .ZERO_SUM  (tram_pkg::cand_mask_t'(128'h0001_0003_0007_0000)),
           .ZERO_CARRY(tram_pkg::cand_mask_t'(128'h0007_0000)))
  u_axm (.w(w), .x(x), .y(y));
```

Row r of a mask is bits `[16*r +: 16]`, and position k is bit k of that row.

## Sizes used with the evaluated networks

| networks | operands | P | how to build |
|---|---|---|---|
| ResNet-18/34/50 (CIFAR-10), 8-bit weights and activations | 8 bit | 8 | default |
| DenseNet-161 (CIFAR-10), 4-bit weights and activations | 4 bit | 4 | `#(.B(4), .P(4))` |
| DeiT-S, Swin-S (ImageNet), 8-bit | 8 bit | 6 | `#(.P(6))` |

A network can share one structure across all its layers, or give each layer
its own. In the second case there is one `tram_axm` instance, with its own
masks, per layer.

## Interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `w` | in | B | unsigned operand W (the weight) |
| `x` | in | B | unsigned operand X (the activation) |
| `y` | out | 2B | approximate product |

| parameter | default | meaning |
|---|---|---|
| `B` | 8 | operand width, 2 … 16 |
| `P` | 8 | number of low columns that may be approximated, ≤ 2B |
| `ZERO_PP`, `ZERO_SUM`, `ZERO_CARRY` | see above | structure |

The multiplier is purely combinational and has no clock or reset. The source
characterises its 8-bit multipliers as single-cycle blocks of about 0.5 ns in
a 7 nm library, measured at 100 MHz. Registers around the multiplier belong
to the accelerator that uses it.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops on a
watchdog. Run any of them with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/tram_pkg.sv rtl/tram_ha.sv rtl/tram_fa.sv rtl/tram_axm.sv \
  tb/tb_axm_ref_pkg.sv tb/tb_tram_axm_full.sv --top-module tb_tram_axm_full
./obj_dir/Vtb_tram_axm_full
```

* `tb_tram_axm` applies all 65,536 pairs of 8-bit operands to eight
  structures:
  * the default structure
  * no removals: must equal W·X exactly
  * every candidate of columns 0–7 removed: must equal the closed form with
    θ_c = 1 for c < 8
  * every mask bit set but P = 0: must be exact
  * sums only, with P = 4
  * carries only, from a pseudo-random mask
  * partial products only, from a pseudo-random mask
  * the 4-bit example with every candidate of columns 0–2 removed: must equal
    W·X − Σ_{c<3} S_c·2^c

  The expected values come from the closed form or from a bit-level model
  written procedurally, independent of the RTL's generate structure. The
  testbench also counts each removal mechanism and fails if one of them never
  changed a product.
* `tb_tram_axm_full` uses the multiplier with every parameter at its default.
  It reruns the greedy mapping in SystemVerilog and requires the masks it
  finds to equal the defaults. It then checks every product and reports the
  error metrics above. It runs in about 3 s.
* `tb_tram_axm_workloads` does the same for the 4-bit, P = 4 setting and the
  8-bit, P = 6 setting. It also covers one case of partial approximation,
  θ = (1, 1, 1, 0.5, 0.5, 0.25, 0, 0) with B = P = 8. For those values the
  mapping ties sums at row 1 positions 0–3, row 2 positions 0–2, row 3
  positions 0–1 and row 4 position 0, plus carries at row 1 positions 0–3.
  That structure gets 58,304 of 65,536 products wrong, with a largest error
  of 128.

## What is not here

* **Training and the power estimate.** Both are software. The power model
  predicts a column's share of multiplier power from counts of AND gates, HAs
  and FAs multiplied by characterised costs.
* **Quantizers.** Activations and weights are quantized in floating point
  during training. The multiplier receives integers.
* **The accelerator around the multipliers.** Using different structures in
  different layers means instantiating `tram_axm` once per structure. The
  datapath, buffers and control that would host the instances are not
  specified, so none are provided.
* **Trained structures.** Only the mapped starting point is built in. Any
  other trained θ gives another set of masks, computed by the mapping
  procedure above.
* **Signed operands.** Only unsigned multipliers are covered, as in the
  source.
