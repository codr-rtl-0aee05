# CoDR in SystemVerilog: a CNN accelerator that multiplies each unique weight only once

A convolutional layer multiplies every weight by a whole plane of input
features. Quantized to 8 bits, most weights of a trained network are zero,
many of the rest are equal, and sorted non-zero weights differ from their
neighbours by small amounts. This accelerator uses all three facts at once:

* **Sparsity.** Zero weights are never stored, so they are never multiplied.
* **Repetition.** Each distinct non-zero weight of an input channel is
  multiplied by that channel's input tile once. Every place where the weight
  occurs in the kernels then reuses the same product matrix.
* **Similarity.** The distinct weights are visited in ascending order. The
  hardware never multiplies a weight itself, only the difference (delta) to
  the previous one. It adds `delta x tile` to a running product matrix, so
  after step *i* the matrix holds `w_i x tile` with no multiplier wider than
  the delta.

The three weight lists that drive this (deltas, repetition counts and
positions) are stored in a run-length code. Its field widths are chosen per
layer, so weights also take less memory. The dataflow keeps output features
on chip until they are final (output stationary). It also keeps each input
tile on chip while every weight that needs it is applied.

The RTL is written for verilator 5 and yosys with the slang front end
(IEEE 1800-2017). The default sizes are the published configuration: 8
processing units, each with 4 input and 4 output channels, 8x8 output tiles
and 20x20 input tiles.

## How one layer is computed

The layer is cut into tiles. A *processing unit* (PU) takes `T_N = 4` input
channels and `T_M = 4` output channels. Inside a PU:

* One *MPE* (multiplier PE) per input channel holds that channel's
  compressed weights for the PU's 4 output channels. Each MPE computes
  product matrices.
* One *APE* (accumulator PE) per output channel holds the 8x8 output tile in
  32-bit partial sums, its Output RF.

The controller runs four nested loops (outermost first):

| loop | runs over | what stays put |
|---|---|---|
| 4 | groups of `T_PU*T_M = 32` output channels | input map is re-read once per group |
| 3 | output tile rows | |
| 2 | output tile columns | |
| 1 | groups of `T_N = 4` input channels | the APEs keep accumulating |

Outputs leave the chip only after loop 1 ends, so each output feature is
written exactly once. Within loop 1, the controller does three things in
turn:

1. It fills the shared Input RF with a 20x20 tile of 4 input channels. Each
   PU's MPE *q* reads plane *q*.
2. It streams every MPE's compressed weight block from the Weight SRAM.
3. It waits until all PUs are idle.

### Inside an MPE

For each *entry*, meaning one distinct weight:

1. The decoder takes a repetition count `n` and a delta `d` from their
   streams.
2. The MLP array adds `d x tile` to its 400-element product matrix. It uses
   16 multipliers, so 25 cycles per entry; 4 MPEs x 16 make the 64
   multipliers per PU. A product matrix element is 16 bits, since
   `|w x I| <= 128 x 128`.
3. `n` times, the decoder produces a weight position (an *index*). The
   selector turns it into an output channel `m` and a kernel position
   `(kr, kc)`. It cuts the 8x8 window `P[kr + r*s][kc + c*s]` out of the
   product matrix, where `s` is the stride, and sends it to APE `m`.

This window cut is what turns one scalar-times-matrix product into the
contribution of one kernel tap to all 64 outputs of the tile.

The 4 MPEs of a PU reach the 4 APEs through an interconnect with one
round-robin arbiter per APE. An MPE whose APE is busy waits (valid/ready).
An APE adds one window per cycle into its Output RF. Its Output RF is preset
with the channel's bias at the start of each output tile.

After the last input-channel group, each APE post-processes its tile in this
order:

1. ReLU, if selected.
2. 2x2 max pooling inside the tile, if selected.
3. Arithmetic shift right.
4. Saturation to 8 bits.

The controller writes the result to the Output SRAM one tile row at a time.

### Cost model

With the network never stalling, an MPE spends per input channel and
output tile:

    entries x (25 + 2) + repetitions x 3   cycles

Here `repetitions` is the number of non-zero weights. A dense 3x3 layer with
256 unique values and 36 weights per MPE is almost all multiply passes. When
unique weights are limited to 16, one pass serves many windows, which is
where the saving comes from.

## The weight code

Each MPE block describes the weights linking one input channel to the PU's
4 output channels. Those are `T_M x K x K` weights, numbered from 1:

    idx = m*K*K + kr*K + kc + 1

Only non-zero weights appear. Within a block they are sorted by value, and
equal values form one entry. Three streams are stored. Each is packed LSB
first into 32-bit words; a field may cross a word boundary.

| stream | per | code (bit 0 first) |
|---|---|---|
| repetition counts | entry | `cnt_bits` unsigned |
| unique-weight deltas | entry | `1, d[wlp_bits-1:0]` if `0 <= d < 2^wlp_bits`, else `0, d[7:0]` (two's complement) |
| indexes | repetition | `1, (idx - prev)[ilp_bits-1:0]` if `0 <= idx - prev < 2^ilp_bits`, else `0, idx[iabs_bits-1:0]` |

The bit-lengths `cnt_bits`, `wlp_bits`, `ilp_bits` and `iabs_bits` (1..15)
are per-layer inputs. Software picks them to minimize the block's size.

The first delta is the smallest weight itself, measured from 0. The running
index starts at 0 for every block.

Two kinds of *dummy entries* keep the code complete:

* **Count overflow.** A repetition count larger than `2^cnt_bits - 1` is
  split. The rest follows as further entries with delta 0.
* **Large gaps.** A jump between consecutive weights that does not fit an
  8-bit two's complement delta (e.g. -128 to 127) is split. The first part
  is an entry with count 0, which moves the running weight but emits no
  window.

The worked example that fixes these conventions uses all bit-lengths 2 and
`iabs_bits = 4`. Its weights are 1, 1, 1, 2, 3, 3 and 8 at positions 1, 4,
10, 8, 5, 7 and 9:

* deltas 1, 1, 2, 5;
* counts 3, 1, 2, 1;
* index codes: relative +1, relative +3, absolute 10, absolute 8, absolute
  5, relative +2, relative +2.

`tb_codr_weight_decoder` checks this bit for bit.

Low-precision deltas are zero-extended. A build-time parameter of the
decoder (`LP_SIGNED`) switches to sign extension.

### Weight SRAM layout (32-bit words, from `cfg.w_base`)

For each output-channel group, in order:

1. The group's 32 biases, PU-major, at Output RF scale.
2. For each input-channel group, each PU and each MPE, one block:
   1. A header word `{delta_words, count_words}`.
   2. A header word `{entries, index_words}`, 16 bits each.
   3. The count words, then the delta words, then the index words.

Channels beyond the layer's `N` or `M` are empty blocks with 0 entries. The
blocks of a group are read again for every output tile. The Weight RF holds
2048 bits per stream. Longer blocks still work: loading stalls until
decoding frees space.

### Input and output layout

* **Input SRAM** (8-bit words): feature `(n, row, col)` is at
  `in_base + (n*ri + row)*ci + col`. Features outside the stored `ri x ci`
  map, and channels `>= N`, read as zero. Zero padding is therefore done by
  storing the padded map, or by letting tiles run off its lower/right edge.
* **Output SRAM** (64-bit words): row `r` of tile `(tr, tc)` of channel `m`
  is at `out_base + ((m*n_tr + tr)*n_tc + tc)*rows + r`. `rows` is 8, or 4
  with pooling. Feature `c` of the row sits in bits `[8c+7:8c]`.

The layer is described by one `layer_cfg_t` struct. It holds channel counts,
stored map size, number of output tiles, kernel size and stride, the four
bit-lengths, ReLU/pooling/shift, and three base addresses. One input tile
must cover `(T_RO-1)*s + K <= 20` rows and columns. That allows kernels up
to 13x13 at stride 1 and 6x6 at stride 2.

## Files

| file | block |
|---|---|
| `rtl/codr_pkg.sv` | sizes, config structs, delta decoding functions |
| `rtl/codr_top.sv` | the accelerator: three SRAMs, Input RF, controller, `T_PU` PUs, host ports |
| `rtl/codr_ctrl.sv` | loop nest, SRAM addressing, weight streaming, bias preset, output drain |
| `rtl/codr_sram.sv` | 1-write 1-read synchronous SRAM array (Input 128000x8, Weight 51200x32, Output 16000x64) |
| `rtl/codr_input_rf.sv` | `T_N` planes of 20x20 input features |
| `rtl/codr_pu.sv` | 4 MPEs, interconnect, 4 APEs |
| `rtl/codr_mpe.sv` | Weight RF, decoder, MLP array, selector and the MPE state machine |
| `rtl/codr_weight_rf.sv`, `rtl/codr_bit_fifo.sv` | three bit-granular stream buffers |
| `rtl/codr_weight_decoder.sv` | the run-length decoder (repetition counter, index register) |
| `rtl/codr_mlp_array.sv` | differential scalar-matrix multiplier and accumulator |
| `rtl/codr_selector.sv` | index to (m, kr, kc) and the strided window cut |
| `rtl/codr_interconnect.sv` | MPE-to-APE network, round-robin per APE |
| `rtl/codr_ape.sv`, `rtl/codr_pool_af.sv` | Output RF, window adder, ReLU / pooling / requantization |

Each file opens with a comment on its operation, interface and timing, and
on which parts follow the published design.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=... failures=...`. `tb/tb_codr_pkg.sv` is a software
model of the encoder: sort, densify, unify, delta and run-length code. It
also holds the requantization reference. The top-level testbenches use it
to build the Weight SRAM image from random weights. They compare every
output with a direct convolution.

    verilator --binary --timing --assert -Irtl -Itb rtl/codr_pkg.sv tb/tb_codr_pkg.sv \
        $(ls rtl/codr_*.sv | grep -v pkg) tb/tb_codr_top.sv --top-module tb_codr_top
    obj_dir/Vtb_codr_top

The two packages must come first. Replace `tb_codr_top` by any other
testbench name to run that one.

* `tb_codr_top` runs three layers with 2 PUs. It counts each mechanism and
  fails if any never happened: zero skipping, repetition reuse, both delta
  widths, both index modes, count-overflow and gap dummies, APE contention
  and MPE stalls, ReLU, pooling, stride 2, edge padding, several
  input-channel groups, several output-channel groups, several tiles.
* `tb_codr_top_full` runs one layer at the default size: 8 PUs, 8 input
  channels, 32 output channels.
* `tb_codr_workloads` runs slices of AlexNet conv2, VGG16 conv3 and
  GoogleNet inception layers at several densities and unique-weight counts.
* The block testbenches (`tb_codr_<block>`) check each unit against its own
  reference.

## Fit to real networks

At the default size, every 3x3, 5x5 and 1x1 stride-1 layer of AlexNet,
VGG16 and GoogleNet maps onto the tiles. Calls that handle part of a layer
are needed when a layer's maps exceed the 125 kB input or output SRAM; the
host then splits the layer into spatial bands or output-channel groups.

Two first layers do not fit a 20x20 input tile:

* AlexNet conv1, 11x11 at stride 4, needs 39 rows.
* GoogleNet conv1, 7x7 at stride 2, needs 21 rows.

Pooling on chip is 2x2 only, so GoogleNet's overlapping 3x3/2 pooling is
left to the host.

## Where this RTL departs from, or adds to, the published description

* **Number of PUs.** The design description says four PUs and draws four.
  Its table of RTL tiling parameters says `T_PU = 8`, which is used here.
* **SRAM split.** The stated 250 kB of input and output SRAM is split evenly
  between the two. Memories are plain arrays with a one-cycle read, not
  macros.
* **Off-chip side.** DRAM and the host are not modelled. Simple host
  read/write ports fill and empty the SRAMs while the accelerator is idle.
  The encoder that picks the bit-lengths runs in software.
* **Own choices.** Everything below is this design's own:
  * the state machines and their cycle counts;
  * the one-word-per-cycle SRAM ports;
  * the serial loading of MPEs: one MPE is loaded while the others already
    compute;
  * the round-robin arbiter;
  * the index numbering;
  * the treatment of out-of-range and padded features;
  * the post-processing: ReLU, 2x2 max pooling, shift and saturate.
* **Differential multiplier.** The multiplier is one 16-lane slice reused
  over 25 passes. The published figure shows a scalar-matrix multiplier and
  accumulator without saying how wide it is.
* **Synthesis size.** Synthesizing the full default top with yosys takes
  longer than 10 minutes. The 32 selectors, each cutting 64 windows out of
  a 400-element matrix, dominate. Both language front ends accept it in
  seconds.
