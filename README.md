# A precision-scalable MAC array template

Neural-network layers are often quantised to different word lengths: 8 bits for
sensitive layers, 4 or even 2 bits elsewhere. A multiply-accumulate (MAC) array that
handles all of these without wasting hardware at low precision is called
*precision-scalable*. Published precision-scalable arrays look very different from
each other, but they can all be described with a single idea. An 8b × 8b product is
split into 2-bit *bit groups* (BGs): 4 weight BGs times 4 activation BGs give 16
partial products of 2b × 2b, each shifted by twice the sum of its two BG indices. The
two BG indices therefore behave like two extra loops of the layer's loop nest. A
design decides where in the array those two loops are unrolled, or whether they are
run over time. At lower precision the BG loops shrink (4b has 2 BGs, 2b has one), and
the hardware they used is handed to the ordinary layer loops.

This repository holds a synthesizable SystemVerilog template for such arrays. Design-
time parameters pick one point of a 72-design space. Run-time inputs pick the weight
and activation precisions: 8, 4 or 2 bits each, including asymmetric pairs such as
8b × 2b. The default point is a 4096-multiplier array shaped like BitBlade. This shape
is one of the most energy-efficient at moderate clock rates.

## The four-level hierarchy

Everything is built from one primitive, a 2b × 2b multiplier with a 4-bit product
(`l1_mult`, level L1). Each higher level is a 4 × 4 grid of units of the level below:

| level | made of | multipliers |
|---|---|---|
| L1 | 2b × 2b multiplier | 1 |
| L2 | 4 × 4 L1 | 16 |
| L3 | 4 × 4 L2 | 256 |
| L4 | 4 × 4 L3 | 4096 |

Unit (r,c) sits in row r and column c of its grid. Weights enter along rows and
activations along columns.

### How a level shares operands (IS, HS, OS)

A level where no BG loop is unrolled (`share_level`) uses one of three *spatial
unrollings*:

* **IS (input sharing).** Column c receives activation slice c and row r receives
  weight slice r. Every unit's result is a separate output, giving 16 outputs × the
  sub-unit's outputs.
* **HS (hybrid sharing).** Columns share an activation slice, but each unit has a
  private weight. The four units of a row are added into one *accumulation island*,
  giving 4 outputs.
* **OS (output sharing).** Every unit has private operands and all 16 results are
  added, giving 1 output.

"Slice" here means the operand bits a sub-unit consumes. Slice j sits at bits
`[j*w +: w]` of the level's bus, with j = r*4 + c for private operands.

### Where the bit-group loops go (`BG` parameter)

* **BG at L2** (`BG_L2`). Inside each L2, the 16 multipliers are split into blocks of
  bw × bi, where bw and bi are the BG counts of the current precisions (4, 2 or 1).
  Each block forms one full-precision product. Multiplier (r,c) of a block takes
  weight BG `r mod bw` and activation BG `bi-1-(c mod bi)`. Its product is shifted
  left by 2·(weight BG + activation BG). The blocks are then combined IS/HS/OS-style
  according to the L2 mode. This routing and shift-add tree (`bg_level`) is
  reconfigured at run time and is the largest piece of logic in the template.
* **BG at L3** (`BG_L3`). The same `bg_level` sits one level up. Its elements are
  whole L2 units that multiply bit groups of the same significance. The shifters are
  shared across an L2's 16 products, which makes the adder trees much cheaper. This
  is the default.
* **Bit-serial** (`BG_BS`, "BS-L2"). The BG loops run over time. Each L2 is output
  sharing and adds its 16 products of equal significance every cycle. A
  shift-and-add unit (`bs_shift_add`) behind it folds those sums into full-precision
  results.

### Fully-used and subword-parallel configurations (`CFG`)

* **FU (fully used).** At low precision, every multiplier gets new operands, so
  throughput grows to 16× at 2b × 2b. The operand bus width, in bits, stays the same.
* **SWU (subword-parallel, `psma_l2_swu`).** An L2 takes one 8-bit weight word and
  one 8-bit activation word at every precision, with the BG loops in the L2. Each
  multiplier has a hardwired shift of 2·(r+3−c). At 4b and 2b, the multipliers that
  would mix different words are gated off (their product is forced to zero).
  * With L2 = IS (no sharing), the products of different words land in disjoint bit
    fields of the wide sum and are read out separately.
  * With L2 = OS, the words' products are added inside the shift tree, and the
    result is realigned (>>4 at 4b, >>6 at 2b). Weight word k meets activation word
    n−1−k, because the hardwired shifts pair them that way.
  * SWU needs equal weight and activation precision.

### Legal combinations

`psma_top` checks the design-space rules at elaboration:

* BS requires L2 = OS.
* SWU allows only L2 = IS or OS with BG in the L2.
* BG at L3 allows L2 = HS or OS.

With L4 and L3 each IS/HS/OS, these rules give 72 designs.

## Bit-serial timing

In a bit-serial design, a product of pw × pi bits takes bw·bi cycles: 16 at 8b × 8b,
4 at 4b × 4b, 1 at 2b × 2b. `bs_timer` steps through the activation BG index
fastest and the weight BG index after it. Two registers per L2 do the arithmetic:

* phase 1, every cycle: `r1 (14 b) <= (sum << 6) + (r1 >> 2)`, which collects the
  activation BGs of one weight BG;
* phase 2, the cycle after the last activation BG:
  `r2 (20 b) <= (a1 << 6) + (r2 >> 2)`, where `a1 = r1 >> 2·(4−bi)`.

The result is `r2 >> 2·(4−bw)`. The two realignment shifts let the same registers
serve 4b and 2b operands. The register widths and the >>2 feedback follow the
published structure. The realignment and the exact cycle timing are this design's
own choices.

The timer accepts the next operand set during the last BG pair of the current one,
so the multipliers never idle. In bit-serial designs each input lane is 8 bits wide
(`TAB = 4·AB`), and the timer selects the current bit group from the held words.
`done` comes two cycles after the last pair and carries the set's first/last tags
to the accumulators.

## Top level: `psma_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `prec_w`, `prec_i` | in | `prec_e` | weight / activation precision (P8, P4, P2) |
| `in_valid`, `in_ready` | in / out | 1 | operand handshake; a set is taken when both are high |
| `act_i` | in | TAB | activation words, word j at `[j*pi +: pi]` (8-bit containers in BS) |
| `wgt_i` | in | TWB | weight words, same packing |
| `first_i`, `last_i` | in | 1 | start / end of an accumulation |
| `out_valid` | out | 1 | pulse: accumulation complete |
| `out_o` | out | NO × AW | accumulated outputs |

At the default point (L4 IS, L3 OS, FU, BG at L3, L2 OS):

* both buses are 2048 bits wide;
* there are 16 outputs, each a 20-bit array result plus 4 bits of accumulator
  headroom (24 bits);
* at 8b × 8b, each output adds 16 products per cycle, and at 2b × 2b it adds 256.

Operands are unsigned.

The array between the input registers and the accumulators is combinational. For FU
and SWU designs:

* a set is taken every cycle;
* its contribution reaches the accumulators two edges later;
* `out_valid` is registered on the same edge that adds the set marked `last_i` into
  the accumulators, so `out_o` holds the finished sums while `out_valid` is high.

Precision may change between sets. In bit-serial mode an assertion requires it to
stay stable while the timer is busy.

## Files

| file | role |
|---|---|
| `rtl/psma_pkg.sv` | enums, the 4 × 4 grid constants and width functions shared by all levels |
| `rtl/l1_mult.sv` | 2b × 2b multiplier with gating input |
| `rtl/share_level.sv` | IS/HS/OS operand distribution and island adders |
| `rtl/bg_level.sv` | run-time BG routing and shift-add tree (BG unrolled at that level) |
| `rtl/psma_l2_swu.sv` | SWU L2 with hardwired shifts and gating |
| `rtl/bs_shift_add.sv` | bit-serial two-phase shift-add registers |
| `rtl/bs_timer.sv` | bit-serial BG schedule |
| `rtl/psma_l2.sv`, `psma_l3.sv`, `psma_l4.sv` | the levels, selecting variants by parameter |
| `rtl/psma_acc.sv` | output accumulators |
| `rtl/psma_top.sv` | input registers, array, timer, accumulators |

## Verification

The testbenches check the RTL against `tb/psma_ref_pkg.sv`, a reference model written
at the level of operand words rather than bit groups. The reference model:

* decodes the packed operands by the sharing rules of each level;
* multiplies the words of every mapped pair;
* sums them into the output slots.

It shares no code with the RTL.

| testbench | what it checks |
|---|---|
| `tb_l1_mult` | all 32 input combinations, with and without gating |
| `tb_share_level` | operand wiring and island sums for IS, HS, OS |
| `tb_bg_level` | run-time routing at all 9 precision pairs, using modelled elements |
| `tb_psma_l2_swu` | SWU L2 for both modes at 8/4/2 bits |
| `tb_bs_shift_add` | shift-add registers driven with random sums, against Σ s·4^(j+k) |
| `tb_bs_timer` | schedule order, back-to-back acceptance, phase-2 strobes, `done` latency and tags |
| `tb_psma_l2`, `tb_psma_l3`, `tb_psma_l4` | levels against the reference at every precision pair; `tb_psma_l4` is the full 4096-multiplier array |
| `tb_psma_acc` | load / add / hold |
| `tb_psma_top` | the default top end to end (see below) |
| `tb_psma_cfg_*` | eight further design points through `psma_cfg_inst` and `psma_driver` |

`tb_psma_top` runs the default top with no parameter overrides. Each precision pair
gets several accumulated sets. The shared driver counts
the mechanisms that apply to the configuration under test: precision switches and
multi-set accumulations always, bit-serial stalls and SWU gating where the design has
them. It counts a failure for any of these that never happened. It also checks the
issue rate: one set per cycle, or one per bw·bi cycles in bit-serial mode.

The eight further design points cover:

* BG at L2 with IS, HS and OS L2s;
* BG at L3 with HS;
* two bit-serial arrays;
* two SWU arrays.

To run one testbench with plain verilator:

```
verilator --binary --timing --assert --top-module tb_psma_top -Irtl -Itb \
    rtl/psma_pkg.sv tb/psma_ref_pkg.sv rtl/*.sv tb/psma_driver.sv tb/tb_psma_top.sv
./obj_dir/Vtb_psma_top
```

Each testbench prints `TB_RESULT checks=N failures=M`. The BG-at-L2 design points
take a few minutes to compile, because their run-time routing is unrolled for every
multiplier.

## Departures and open points

* **Operand layout.** Operand packing, slice order and the BG-to-multiplier
  assignment inside a block are this design's choices. The published structure fixes
  what is shared, not the bit order.
* **Signedness.** Operands are unsigned. Signed operation is not covered.
* **Gating.** Gated multipliers are modelled as zeroed products through an enable
  input. No clock or operand gating is implemented.
* **Periphery.** The array has a plain valid/ready handshake and first/last
  accumulation tags. The surrounding memories and dataflow controller are outside
  this RTL.
* **Bit-serial location.** The bit-serial variant exists only at L2 (BS-L2). Serial
  shifting at L3 or L4 is not provided.
* **Asymmetric precisions.** For asymmetric pairs with BG unrolled spatially, the
  block decomposition extends the symmetric one (bw rows × bi columns). SWU arrays
  support only symmetric precisions.
* **Power and area.** No power or area results are claimed for this RTL.
