# Digital Neuron: a shift-and-add inference accelerator for CNNs

This is synthesizable SystemVerilog for the "Digital Neuron" accelerator. It
follows the paper *Digital Neuron: A Hardware Inference Accelerator for
Convolutional Deep Neural Networks* (H. Park, D. Kim, S. Kim). The RTL is an
independent implementation. The paper gives the block structure, the
arithmetic and the filter-mapping scheme. It does not give a controller,
memory sizes or interfaces, so those were designed here; they are listed
below.

The idea in one paragraph: the design has no multipliers. Each signed 8-bit
weight is replaced by the nearest sum of **three signed powers of two**,
`w ≈ wa·2^a + wb·2^b + wc·2^c` with `wa, wb, wc ∈ {-1, 0, +1}`. A product
`x·w` then becomes three barrel shifts of `x` or `-x`. The many shifted
partial products of a whole dot product are added at once by a carry-save
**multi-operand adder** (MOA). The MOA skips sign extension: it counts the
negative operands and adds the negated count once. These parts are small,
so 800 of them fit side by side. Four *Neural Tiles* each compute a
5×5×8 dot product every clock, and they can be grouped for 5×5, 7×7 and
9×9 filters of various depths, or for fully-connected layers.

## 1. Arithmetic

### Weight decomposition (`weight_decomp`)

Each term is the power of two nearest to what is left of the weight (ties go
to the larger power), and is then subtracted. With three terms and shifts
0..7 this gives the exact value for every 8-bit weight that has a signed-digit
form with at most three nonzero digits, and the best possible value, off by
at most 2, for the rest. An exhaustive check over all 256 weights in
`tb_weight_decomp` confirms both. The paper gives the equation but not this
algorithm. Sign codes are `01` = +1, `11` = −1, `00` = 0.

### Multiplication by barrel shift (`mbs`)

For each term, a 3-way mux picks `X`, `~X+1` or `0`, and a barrel shifter
shifts it left by `a`, `b` or `c`. Formats:

| signal | width | meaning |
|---|---|---|
| `x` | 8, unsigned | activation |
| `w` | 8, signed | weight |
| shift `a,b,c` | 3 each | 0..7 |
| partial product `P` | 16 | bits [14:0] = shifter output, bit 15 = sign |
| neural-element sum | 23, signed | 75 partial products |
| `O_NT` and the adders after it | 32, signed | |

The 15-bit shifter output and the 23-bit neural-element sum are the widths
printed in the paper's figures. `~X+1` is taken in 8 bits, as in the paper,
so the term's sign lives in bit 15 and is handled by the MOA. A −1 term with
`X = 0` is emitted as +0, because the 8-bit negation of 0 has no sign.

## 2. The multi-operand adder (`moa`)

This is the least obvious part of the design.

**Sign without extension.** To add signed operands the usual way, every
operand is sign-extended to the output width. A negative operand's extension
bits are all ones. Summed from bit `IN_W-1` upward they equal −1 at weight
`2^(IN_W-1)`. So the extensions of all operands add up to
`−NUM_P · 2^(IN_W-1)`, where `NUM_P` is the number of negative operands.
The MOA therefore:

1. feeds only bits `[IN_W-2:0]` of every operand into the adder tree;
2. counts the sign bits (`NUM_P`), negates the count with a two's complement
   (`N_NUM_P`), and puts it in as one extra row placed at bit `IN_W-1`.

Example with 5-bit operands: `11101 + 10110 + 10010 + 00101 + 10101 + 10000`
equals `1101 + 0110 + 0010 + 0101 + 0101 + 0000 + (−5)·2^4`.

**Reduction.** Each stage groups the rows in threes, and a row of full
adders turns each group into a sum row and a shifted carry row. For the 75
partial products of a 5×5 neural element the row count goes
75 → 50 → 34 → 23 → 16 → 11 → 8 → 6 → 4 → 3 → 2: ten stages, then one
carry-propagate adder. The `N_NUM_P` row comes through a popcount and a
negation, so it is ready late. It joins at the latest stage where it does not
add a stage (before stage 7 for 75 operands). The join point is computed from
`N_OPS` at elaboration. The same module, with 10 operands of 32 bits, is the
per-tile channel adder (MOA(CHSUM)).

The tree here works on whole rows, each `OUT_W` bits wide. A gate-level
design would trim each row to the bits it can actually carry. The result is
the same modulo `2^OUT_W`.

## 3. Neural element, Neural Tile, and the four-tile datapath

* `neural_element`: 25 MBS units and one 75-operand MOA give a 5×5 dot
  product of one channel (23-bit result).
* `neural_tile` (NT): eight neural elements (5×5×8). A 10-operand MOA adds
  their results, the bias, and, when `acc_sel` (ACC_SEL) is high, the tile's
  own previous output. The sum goes into the `O_NT` register, so one complete
  5×5×8 dot product takes one clock.
* `nt_combiner`: three adders give `O_NT1P2 = O_NT1+O_NT2`,
  `O_NT3P4 = O_NT3+O_NT4` and `O_NTSUM = O_NT1P2+O_NT3P4`.
* `activation`: ReLU, then drop `shift` LSBs, then saturate to 8 bits. A
  shift of 4 undoes the ×16 scaling used to turn trained weights into
  integers.
* `output_fmap` → `pooling` (2×2 max, or copy) → `input_fmap`. With the
  `M_SEL = OF` path, each layer's output becomes the next layer's input
  on-chip. `M_SEL = Init` is the DRAM image-load path.

```
 DRAM ─► w_bank ─► w-bus ───────────┐
 DRAM ─► input_fmap ─► assign_xbus ─► X-bus ─► NT1..NT4 ─► CLA adders ─► ReLU
             ▲                                                            │
             └──── (M_SEL=OF) ◄── pooling ◄── output_fmap ◄───────────────┘
```

## 4. Feeding the tiles: column update and w-bus rotation

When a 5×5 filter slides one column to the right, four of the five window
columns are still in the X-bus register. Instead of shifting the whole
window, `assign_xbus` overwrites **only one bus column**, the slot that held
the column that just left. It writes the new rightmost map column
(`x + 4`) there. The other 20 bytes per kernel do not toggle. The bus columns
are then no longer in filter order, so the `w_bank` rotates every 5×5 weight
kernel one column to the right on each step. After `t` steps, bus slot `j`
holds window column `(j − t) mod 5` and the matching weight column:

| step t | slot written | slot 0 | slot 1 | slot 2 | slot 3 | slot 4 |
|---|---|---|---|---|---|---|
| 0 (row start, full load) | all | col 0 | col 1 | col 2 | col 3 | col 4 |
| 1 | 0 | col 4 | col 0 | col 1 | col 2 | col 3 |
| 2 | 1 | col 3 | col 4 | col 0 | col 1 | col 2 |

At the start of each output row both buses are loaded in full again. This
mode is used whenever the filter is 5×5 and the whole depth fits in one pass.
For 7×7 and 9×9 filters, and for multi-pass layers, the X-bus is gathered in
full every clock.

## 5. Filter sizes, depth and grouping

A 7×7 or 9×9 filter channel is flattened to 49 or 81 elements and cut into
25-element chunks, one per tile: 7×7 → `[0:24]`, `[25:48]`; 9×9 →
`[0:24]`, `[25:49]`, `[50:74]`, `[75:80]`. The tiles are grouped by `grp` in
the layer descriptor:

| `grp` | outputs per clock | stored value | NTs per output `S` | example (paper's cases) |
|---|---|---|---|---|
| `GRP1` | 1 | `O_NTSUM` | 4 | 5×5×32 (1), 7×7×16 (2), 9×9×8 (3), 5×5×128 (6), FC |
| `GRP2` | 2 | `O_NT1P2`, `O_NT3P4` | 2 | 7×7×8 twice (5) |
| `GRP4` | 4 | `O_NT1..4` | 1 | 5×5×8 four times (4) |

With `C` chunks per filter channel, each pass covers `8·S/C` channels. A
deeper filter takes `ceil(depth / (8·S/C))` passes, which `O_NT` adds up
through ACC_SEL (case 6: a 5×5×128 filter takes four passes of 32 channels).
NT `n` belongs to output group `n / S` and has local index `l = n mod S`; it
takes chunk `l mod C` and channels `pass·8S/C + (l div C)·8 ... +7`. In
`GRP2`/`GRP4` the parallel outputs are **vertically adjacent output rows**,
so every tile's window still slides one column per clock and the column
update works for all groupings. The paper's figures do not fix this choice.

## 6. Running a layer

The host (not part of this RTL) does three things.

1. **Loads weights once** through `wld_*`. A w bank word is one complete
   w-bus image: `[nt][channel][element]` with element = row·5 + column, 800
   weights in all, plus one 16-bit bias per tile. The word for output channel
   `oc` and pass `p` is at `wbase + oc·passes + p`. Lane `nt·8 + ch` of that
   word holds the chunk and channels that NT takes (see section 5), with zeros
   where the filter has no element. Put the bias only in pass 0, and only in
   the first NT of each output group. One kernel or one bias is written per
   clock.
2. **Loads the image** through `img_*` (one byte per clock, `M_SEL = Init`).
3. **Starts each layer** by putting a `layer_cfg_t` on `cfg_in` with a
   one-clock `start`, then waits for `done`.

| field | meaning |
|---|---|
| `fc` | fully-connected: neuron `j` is stored at channel `j/25`, row `(j%25)/5`, column `j%5` |
| `k` | filter side 5, 7 or 9 |
| `grp` | grouping, see above |
| `in_ch` | filter depth, 1..128 (also masks unused channels to 0) |
| `out_h`, `out_w` | output size (valid convolution, stride 1; 1×1 for FC) |
| `out_ch` | output channels or FC neurons |
| `wbase` | first w bank word |
| `pool2` | 2×2 max pooling on write-back (ignored for FC) |
| `shift` | LSBs dropped after ReLU |

**Timing.** One dot product is issued per clock. The X-bus and w-bus load in
clock *i*, `O_NT` latches in *i+1*, and the output map is written in *i+2*.
After the last issue come two drain clocks, then the write-back of one value
per clock into the input map. From `start` to `done` the layer takes
`issues + writebacks + 5` clocks, where
`issues = out_ch · ceil(out_h / outputs per clock) · out_w · passes`.

**Fully-connected layers** are 5×5 "convolutions" over the 5×5×C vector at
the map origin. Each clock takes a new w bank word, up to 800 inputs per
neuron. Larger inputs use passes. The results are written back flat, in the
same 5×5×C layout, so they are the next FC layer's input.

## 7. Measured on LeNet-5

`tb_lenet5` runs one LeNet-5 inference at the default sizes. The weights
are random but exact under the three-term scheme, and so is the image. Layers:
conv 5×5×1→6 (`GRP4`, pooled) and conv 5×5×6→16 (`GRP4`, pooled), then FC
400→120→84→10. All 236 weight words stay in the bank.

| layer | clocks | dot-product issues |
|---|---|---|
| conv1 | 2,357 | 1,176 |
| conv2 | 885 | 480 |
| FC1 | 250 | 120 |
| FC2 | 189 | 84 |
| FC3 | 40 | 10 |
| **total** | **3,721** | |

The paper reports 2,384 clocks per image on its FPGA. The difference comes
mostly from this design's write-back, which moves one pooled value per clock
and does not overlap it with computation. Its controller is not described, so
its own schedule cannot be checked.

## 8. Where this RTL departs from, or fills in, the paper

* **Widths.** The paper's text says the MOA output is 18 bits, and its MOA
  figure prints 12-bit products and a 21-bit output. Its MBS figure prints
  15-bit shifter outputs and its tile figure 23-bit neural-element outputs.
  This RTL follows 15 + sign and 23, the pair that fits 8-bit inputs with
  shifts up to 7. The MOA is parameterized, so the other sizes are a
  parameter change.
* **Main configuration.** 8-bit weights with three sub-integers, as in the
  paper's architecture section. Its FPGA run used 5-bit weights with two
  sub-integers. Any such weight is also exactly representable here.
* **Own choices.** The decomposition algorithm, the accumulator (32 bits) and
  bias (16 bits) widths, the map sizes (128×32×32 bytes for the input and
  the output map), the w bank depth (256 words) and word layout, the
  load/read ports, the pooling type (2×2 max), the saturation after
  truncation, the vertical placement of parallel outputs, the controller
  and its write-back schedule.
* **FC steps.** The paper describes a fully-connected layer done in steps
  of 400 elements. Here one clock takes up to 800 inputs of a neuron (the
  whole 5×5×32 window). Longer vectors are added over passes.
* **Separate ACC_SEL per tile.** The paper draws one ACC_SEL per NT. Here a
  single signal drives all four, since every grouping accumulates all tiles
  together.
* **Adders.** The final carry-propagate adders are written as `+`. The
  synthesis tool picks the carry structure, where the paper names CLA
  adders.
* **Not modelled.** DRAM and its controller (the host drives the load ports
  directly), and power gating or clock gating beyond the one-column update.
* **Big muxes.** The full-window gather reads 800 bytes from the 128×32×32
  input map with computed indices. This is written as array indexing, which
  simulates quickly, but it is a very large multiplexer in gates.

## 9. Files and simulation

| file | block |
|---|---|
| `rtl/dn_pkg.sv` | widths, bus types, `layer_cfg_t`, grouping enum |
| `rtl/weight_decomp.sv`, `rtl/mbs.sv` | weight split and shift multiplier |
| `rtl/moa.sv` | multi-operand adder |
| `rtl/neural_element.sv`, `rtl/neural_tile.sv`, `rtl/nt_combiner.sv` | compute |
| `rtl/activation.sv`, `rtl/pooling.sv` | ReLU/truncate/saturate, pooling |
| `rtl/w_bank.sv`, `rtl/input_fmap.sv`, `rtl/output_fmap.sv`, `rtl/assign_xbus.sv` | storage and buses |
| `rtl/controller.sv` | layer sequencer |
| `rtl/digital_neuron.sv` | top level |

Each `tb/tb_<block>.sv` is a self-checking testbench. It prints
`TB_RESULT checks=N failures=M`, and a watchdog ends it if it hangs.
`tb_digital_neuron` runs every filter case through the full-size top,
compares with a software model, and checks that each mechanism happened:
column update, rotation, ACC_SEL, each grouping, K=7, K=9, pooling, FC,
both M_SEL paths, ReLU clamping and saturation. `tb_lenet5` is the LeNet-5
inference above.

Build and run a testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl rtl/dn_pkg.sv tb/tb_digital_neuron.sv \
          --top-module tb_digital_neuron -j 8
./obj_dir/Vtb_digital_neuron
```

Verilator finds the other modules through `-Irtl`. The end-to-end tests run
in about a minute, most of it C++ compilation.

**How far to trust it.** Every block is checked against an independent
reference: an exhaustive search for the weight split, plain integer sums for
the adders, and a behavioural convolution, pooling and FC model for the
whole chip. Each testbench was also run against a deliberately broken copy
of its block and failed. The checks are functional only. Timing, area and
power, which the paper reports from HSPICE and FPGA runs, are not
reproduced.
