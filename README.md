# DDC-PIM in SystemVerilog

A 6T SRAM cell holds one bit `Q` and, on its other node, its complement
`Qbar`. An ordinary SRAM compute-in-memory array uses only `Q`, so one cell
stores one weight bit. DDC-PIM uses both nodes. It trains the network so that
filters come in complementary pairs. One filter of a pair is stored as a normal
signed INT8 vector `w`. The other is its bitwise complement `~w`, which is
already in the cell as `Qbar`. One row of SRAM therefore serves two filters,
and one compute cycle returns two products per cell: `Q AND input` and
`Qbar AND input`. Storage per array doubles, and so does the work done per
cycle.

This repository is a synthesizable RTL model of the DDC-PIM accelerator
described by Duan et al. ("DDC-PIM: Efficient Algorithm/Architecture Co-design
for Doubling Data Capacity of SRAM-based Processing-In-Memory"). It covers:

- the double-bitwise multiply unit;
- the compartment and its readout rank;
- the reconfigurable adder units;
- bit-serial shift & add;
- the accumulate-and-recover unit;
- the macro;
- the pre- and post-process units;
- the three on-chip memories;
- a top controller.

Everything runs at the paper's main size: four macros, each of 32
compartments × 16 bit columns × 64 rows (4 KB per macro).

## Filter complementation and the mean value M

Two trained filters `f1` and `f2` are only rarely exact bitwise complements.
The training step pushes them towards *biased complements*: for every element,
`f1 + f2 = 2M − 1` for one integer `M` per filter pair. Since `~w = −w − 1` in
two's complement, writing

    w_c = f1 − M          (stored, INT8)
    f1  = w_c + M
    f2  = ~w_c + M

lets both filters be recovered from the stored `w_c`, its complement and `M`.
For an input vector `I`:

    I·f1 = I·w_c  + (ΣI)·M
    I·f2 = I·~w_c + (ΣI)·M

The array computes `I·w_c` and `I·~w_c`. The *recover* step adds `(ΣI)·M`
afterwards. It costs one running sum of the inputs and one multiply per
output, not per weight.

Example: `f1 = −5`, `f2 = 6`, `M = 1`. Then `w_c = −6 = 11111010₂` and
`~w_c = 00000101₂ = 5`, which gives `f1 = −6 + 1 = −5` and `f2 = 5 + 1 = 6`.

Finding the pairs, training with the constraint and computing `M` are done
offline in software. That part is not in this RTL. The testbenches build their
weights the same way: they pick `w_c` and `M`, then check the hardware results
against `I·(w_c+M)` and `I·(~w_c+M)`.

Layers with no filter pairing (in the paper, typically fully connected layers)
run in *regular* mode. Only `Q` is used, and the recover step is off.

## DBMU: two products from one column

`ddc_dbmu` is one bit column: 64 cells plus a local processing unit (LPU). The
active row's cell drives two outputs:

    o_ch0 = en_q  & Q    & INP
    o_ch1 = en_qb & ~Q   & INN

`INP` and `INN` are two separate input bits broadcast to the column. The chip
does this with dynamic (precharge/evaluate) logic on the cell nodes. Here it is
static AND gates, and the precharge switches become the enables `en_q` and
`en_qb`. Writes and the normal SRAM read go through the same row select.
Cell contents are not reset, which is what an SRAM does.

## Compartment: spliced weight pairs and the readout rank

`ddc_compartment` has 16 DBMUs sharing a word line. A row holds 16 bits:
`{wA, wB}`, two INT8 Comp-filter elements spliced together. DBMU #0..#7 hold
`wA` bits 7..0, and DBMU #8..#15 hold `wB` bits 7..0. The enables are split
per half (`en_q[1:0]` and `en_qb[1:0]`) so that a depthwise stage can switch
off the half it does not use.

The 32 LPU outputs are registered every compute cycle into `och[4][8]`:

| channel | value | meaning |
|---|---|---|
| 0 | `wA & INP` | filter A |
| 1 | `~wA & INN` | twin of A |
| 2 | `wB & INP` | filter B |
| 3 | `~wB & INN` | twin of B |

Index `[k]` is weight bit `k`. This register rank is the first pipeline stage
of the macro.

## Reconfigurable unit: one adder tree pair, two ways of using it

This is the least obvious part of the design, so it is described in full.

A macro has 32 compartments and four *adder units*. Each adder unit has two
*adder trees* (`ddc_adder_tree`, inside `ddc_adder_unit`). Tree 0 counts one
channel over compartments 0–15, and tree 1 counts it over compartments 16–31.
A tree outputs, for every weight bit position `k`, how many of its 16 inputs
are 1. `ddc_reconfig_unit` wires the trees one of two ways.

**Standard, pointwise and FC layers.** All 32 compartments see the same input
vector on both `INP` and `INN`. Adder unit `u` takes channel `u` from all 32
compartments and adds its two trees. The macro then produces four output
channels per row step:

- `I·wA` and `I·~wA`, two filters from one stored vector;
- `I·wB` and `I·~wB`, two more.

**Depthwise layers.** A depthwise filter sees only its own input channel. With
one broadcast input, the twin filter would have no useful input. Here `INP`
and `INN` carry *different* inputs, which is the dual-broadcast input
structure. The `Q` side computes on one input channel and the `Qbar` side on
another. Both halves of an adder unit are now used separately, and each
16-compartment tree is its own output channel. The two weight halves take
turns in two stages:

| stage | weights used | adder unit | compartments | outputs |
|---|---|---|---|---|
| 0 | `wA` | 0 | 0–15 | channel 0 (Q side, INP), channel 1 (Qbar side, INN) |
| 0 | `wA` | 1 | 16–31 | channels 2 and 3, the same way |
| 1 | `wB` | 2 | 0–15 | channels 0 and 1 |
| 1 | `wB` | 3 | 16–31 | channels 2 and 3 |

A depthwise MVM thus gives four channels per macro, as a standard MVM does,
although each depthwise filter has only a few taps. The paper does not say
which adder units serve stage 1; units 2 and 3 are this design's choice.

`cnt[channel][bit]` is 6 bits wide: a count of up to 32.

## Bit-serial arithmetic: shift & add with a signed MSB

Inputs are signed INT8 and enter one bit per cycle, MSB first, so one row step
takes 8 cycles. `ddc_shift_add` first weights each bit count by its weight-bit
position. Bit 7 counts negative (two's complement):

    t = Σ_{k<7} cnt[k]·2^k − cnt[7]·2^7

It then accumulates over the input bits:

    acc = (acc << 1) + t
    on the input MSB: t is negated (invert and add 1) and acc restarts

After the LSB cycle, `acc` is the signed dot product of this row step's inputs
with one filter. The unit registers it as a partial sum (*Psum*).

## ARU: accumulation over rows and recovery

`ddc_aru` adds the Psums of consecutive row steps. A filter longer than 32
elements spans several rows. In parallel it accumulates the input sum `ΣI` of
the inputs that fed this channel. On the last row it registers

    res = acc + ΣI · M        (recover on)
    res = acc                 (recover off)

`M` is signed 8-bit. Each macro has four M registers:

- standard mode: channels 0/1 use `M[0]` and channels 2/3 use `M[1]`;
- depthwise stage `s`: channels use `M[2s]` and `M[2s+1]`.

Each depthwise stage has its own pair.

`ddc_merge_unit` holds four lanes of shift & add plus ARU, one lane per
channel.

## Macro pipeline and timing

`ddc_pim_macro` ties these parts together, with `ddc_macro_ctrl` decoding the
mode and aligning control. Mode encoding:

| mode | `en_q` | `en_qb` |
|---|---|---|
| SRAM | off | off |
| regular | weight half mask | off |
| double | weight half mask | weight half mask |

The weight half mask is `11` in standard mode, `01` in depthwise stage 0 and
`10` in depthwise stage 1.

The pipeline has three stages:

| cycle | stage |
|---|---|
| t | input bit on `INP`/`INN`, AND in the LPU, captured in the readout rank |
| t+1 | adder trees and shift & add register |
| t+2 | ARU register; `res_valid` is high in the next cycle |

So `res` is valid three clock edges after the last input bit of the last row.
The macro controller delays the control flags by one cycle and the input sums
by two, to match.

With four macros, 4 × 4 channels × 32 compartments = 512 multiply-accumulates
complete every 8 cycles. That is 64 MAC (128 operations) per cycle, which
matches the paper's peak of 42.67 GOPS at 333 MHz. In the full-size test, an MVM over all 64
rows takes 520 cycles from start to output write. That is 126 operations per
cycle, about 42 GOPS at 333 MHz.

## Pre-process: fetch, prefetch and dual broadcast

`ddc_preprocess` feeds all four macros with one shared bit stream. An MVM is
given a start address, a first row `row0` and a row count. For each row step
it reads from the ping-pong memory:

- **standard/pointwise/FC:** two 128-bit words, byte `c` = input of
  compartment `c`. `INN` carries the same bytes as `INP`.
- **depthwise:** four words, `INP` bytes then `INN` bytes.

The inputs must already be laid out per row step (im2col), with zeros in unused
compartments. Address generation for convolution windows is not part of this
design.

While one row step is being serialised, the next one is fetched into a second
buffer. Row steps therefore follow each other every 8 cycles with no gap, and
the row address is `row0 + step`. The unit also forms the per-channel input
sums for the ARU:

- standard mode: the sum of all 32 inputs, for every channel;
- depthwise mode: `INP` of compartments 0–15, `INN` of 0–15, `INP` of 16–31 and
  `INN` of 16–31.

## Post-process and the ping-pong memory

`ddc_postprocess` takes the 16 results of an MVM (byte `4·m + c` of the output
word is channel `c` of macro `m`). For each result it does the following:

1. arithmetic right shift (requantisation);
2. optional ReLU;
3. saturation to INT8;
4. max pooling across consecutive MVMs. `pool_first` opens a window and
   `pool_last` writes the 128-bit word.

The write happens one cycle after `res_valid`.

`ddc_pingpong_mem` has two 64 KB banks of 4096 × 128 bits. The MVM datapath
reads from bank `sel` and writes to the other bank. A swap exchanges the banks
between layers, so one layer's output becomes the next layer's input without a
copy. A separate external port reaches either bank, for off-chip transfers.
`ddc_weight_mem` is 256 KB of 16-bit spliced rows. `ddc_instr_mem` is
1024 × 64 bits.

## Top controller and instruction set

The paper does not give an instruction set. `ddc_top_ctrl` runs this one,
defined in `ddc_pkg`:

| op | code | fields | effect |
|---|---|---|---|
| HALT | 0 | — | stop, raise `done` |
| LOADW | 1 | [59:43] weight addr, [42:30] PIM addr `{macro, row, comp}`, [29:17] count | copy rows from weight memory into the macros, one per cycle |
| LOADM | 2 | [59:43] weight addr | copy 8 words: word `j` is two M bytes for macro `j/2`, pair `j%2` |
| MVM | 3 | `mvm_instr_t`: in/out addr, row0, nrows, mode, dw, stage, recover, relu, shift, pool_first, pool_last | run one MVM and wait for the post-process write |
| SWAP | 4 | — | swap the ping-pong banks |

Instructions run strictly one after another. A fetch takes 2 cycles. LOADW
takes `count + 2` cycles. An MVM takes 8 cycles per row step plus about 13
cycles of fetch, input fill, pipeline drain and write-back. A one-row
depthwise MVM therefore costs about 21 cycles, of which 8 do useful work.
Longer MVMs amortise the overhead. The paper does not describe how its
controller sequences work, and this strict one-at-a-time scheme is probably
slower than the chip behind the paper's reported latencies.

The weight memory's external write port is independent of the controller. The
next layer's weights can therefore be written from DRAM while the current
layer runs, which is the weight prefetch the paper describes. LOADW itself
(weight memory into PIM cells) does not overlap with MVMs.

`ddc_top` connects everything. Off-chip DRAM is outside the design. Its
transfers appear as `ext_*` write ports into the three memories, a read port on
the ping-pong memory, and a PIM row readback port (SRAM mode, while the
controller is idle).

## What follows the paper and what does not

These follow the paper:

- the cell/LPU truth table and the twin weight `~w` in `Qbar`;
- 16 DBMUs × 64 rows per compartment and 32 compartments per macro;
- four macros, two adder trees per adder unit and four adder units;
- the dual input broadcast;
- shift & add with a signed transform of the MSB;
- the recover unit computing `(ΣI)·M`;
- 256 KB weight memory and 128 KB ping-pong memory;
- INT8 inputs and weights.

These are this design's own choices:

- the bit order in a row, and MSB-first input;
- which adder units serve depthwise stage 1;
- all widths inside the datapath (6-bit counts, 32-bit sums, 16-bit input
  sums, 8-bit `M`);
- the register stages and the 3-cycle latency;
- the 128-bit memory word and the im2col input layout;
- the instruction set and its strict sequencing;
- the post-process operations (the paper says only "pooling and other
  operations");
- instruction memory size.

Not built:

- the transistor-level 6T cell and the dynamic LPU circuit;
- the DRAM;
- the offline FCC training and mapping;
- overlap of LOADW with MVMs, and any deeper instruction pipelining;
- activations other than ReLU (SiLU, sigmoid), squeeze-and-excitation,
  residual additions and attention.

## Mapping a layer: a worked example

`tb/tb_ddc_mbv2_block.sv` runs a MobileNetV2-style pair of layers and shows
how a network maps onto the instructions.

**Depthwise 3×3 on 32 channels (6×6 map).** The nine taps of a channel go to
compartments 0–8 (INP), with the twin channel's taps on INN. Another channel
pair uses compartments 16–24. One row of macro 0 thus holds eight depthwise
filters: four in `wA`, used in stage 0, and four in `wB`, used in stage 1.
Each MVM produces four output channels of one pixel. The other three macros
see the same broadcast inputs, so a depthwise MVM uses one macro, as in the
paper. Only four M registers exist per macro. All groups that run in the same
stage share their M pair, or else M is reloaded with LOADM between groups.

**Pointwise 32→16.** One row step of 32 inputs per pixel. Row 10 of all four
macros holds the sixteen filters.

Between the layers, the off-chip side rearranges the depthwise outputs into
the pointwise input layout. This is the im2col step that this design leaves
outside the chip.

## Sizes and the networks of the paper

Per layer, the chip holds 16 KB of weights in the PIM cells and 256 KB in
weight memory. With FCC, the PIM cells hold 32768 filter weights and weight
memory holds 524288. Weights stream in from DRAM layer by layer.

- **MobileNetV2:** its largest layer (1×1, 320→1280, about 200 KB of Comp
  filters) fits in weight memory.
- **EfficientNet-B0:** its convolutions fit, but its SiLU and
  squeeze-and-excitation steps have no hardware here.
- **VGG19 and ResNet18 (CIFAR versions):** their 3×3 512→512 layers need about
  4.5× the weight memory, so a single layer would have to be streamed in
  pieces.
- **MobileViT-XS:** its attention and normalisation layers are outside the
  design.

Feature maps larger than one 64 KB bank need spatial tiling through DRAM.

One MVM covers at most 64 row steps of 32 inputs, so a filter can have at most
2048 elements. Longer filters, such as a 3×3×512 kernel with 4608 elements,
must be split over several MVMs. Their INT8 outputs cannot be summed again on
chip: the post-process unit only shifts, activates, saturates and pools.
Either those partial sums are combined off chip, or the layer needs a wider
output path that neither this design nor the paper describes.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. Build and run one with plain Verilator, for
example:

    verilator --binary --timing --assert -Irtl -Itb rtl/ddc_pkg.sv \
        tb/tb_ddc_top.sv --top-module tb_ddc_top
    ./obj_dir/Vtb_ddc_top

`tb_ddc_top` runs the whole accelerator at full size. It loads all 8192 PIM
rows and the M values through the external ports, then runs:

- a standard convolution with FCC recovery;
- both depthwise stages;
- an FC layer in regular mode with ReLU;
- a two-MVM max-pooling window;
- an MVM over all 64 rows, checked against the peak rate;
- a bank swap;
- a second layer that reads the first layer's outputs.

It compares every output word with a program-level model in the testbench. It
also checks that:

- row steps stream at 8 cycles each;
- the result comes 3 cycles after the last input bit;
- PIM rows read back correctly in SRAM mode.

It counts each of these mechanisms and fails if one never occurs.

The unit testbenches compare against dot products and bit counts computed
independently in the testbench, from random weights, inputs and `M` values.

`tb_ddc_mbv2_block` runs the worked example above end to end. It compares all
36 × 32 depthwise outputs and 36 × 16 pointwise outputs with a direct
convolution computed in the testbench from the real (biased-comp) filters. It
also writes the pointwise weights while the depthwise layer is running.
