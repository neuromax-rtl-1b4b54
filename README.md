# NeuroMAX CONV core in SystemVerilog

NeuroMAX is a CNN accelerator that uses logarithmic number codes. This makes a
multiplier so cheap that each processing element (PE) can hold three of them.
Activations and weights are stored as exponents of √2, so a product is just a
small addition, one 15-bit table entry and a right shift. Each PE is built from
three such "threads", which share one activation and take three different weights.
The core has 108 of these PEs in six 6x3 matrices: 324 multipliers, each issuing
one product per clock. The design is organised around the two kernel sizes that
dominate modern CNNs:

* **3x3 convolution** (stride 1 and 2). A 6x3 window of the input slides over the
  image. The three threads of each PE handle the three rows of the filter.
* **1x1 (pointwise) convolution.** The PEs of a row are three channels of one
  pixel. The three threads are three filters. The six matrices together take 18
  channels per clock.

Between the multipliers and the output SRAMs sit:
* a fixed adder tree for each matrix (adder net 0);
* a configurable adder (adder net 1), whose connections depend on the mode;
* a channel accumulator;
* a post-processing stage that applies ReLU and converts the linear sum back to a
  log code.

This repository holds the RTL of the CONV core: the SRAMs, the state controller
(sequencer) and all of the datapath. The surrounding SoC is not included: the
ARM host, the DDR, the DMA and the AXI interconnect. The core exposes plain SRAM
load and read-back ports and a parameter/start/done port in their place.

## Number formats

| quantity | bits | meaning |
|---|---|---|
| activation code `a` | 6 | value ∝ √2^a (unsigned, after ReLU); code 0 acts as zero |
| weight code `w` | 7 | bit 6 = sign, bits 5:0 = exponent |
| thread product | 16 signed | ≈ ±2^((w+a-97)/2), exactly 0 for w+a ≤ 97 |
| psum (adder net 0) | 18 signed | sum of three products |
| lane (adder net 1) | 22 signed | |
| accumulator | 32 signed | |
| output code | 6 | ReLU, then round(log√2 y) + q_offset, clipped to 1..63; y ≤ 0 → 0 |

**Thread** (`log_thread`):
* It forms S = w[5:0] + a, a 7-bit sum.
* The low bit of S picks a 15-bit table entry: 7FFF (≈1.0) when S is odd, 5A82
  (≈1/√2) when S is even.
* That entry is shifted right by the inverted upper six bits of S, that is by 63 - S/2.
* The weight's sign is then applied.

The two table entries, the split into integer and fractional parts, and the
inverted shift are the paper's. It does not say which value of the fractional bit
picks which entry. The mapping used here is the only one under which the product
grows with S. Every weight magnitude is at most 63 and 63 ≤ 97, so activation
code 0 always gives an exact zero product.

**Re-quantisation** (`post_processing`):
* Let p be the position of the leading one of y, and m the 16 bits starting there.
* The code is k = 2p + (m ≥ 38968) + (m ≥ 55110) + q_offset.
* The two thresholds are 2^15·2^0.25 and 2^15·2^0.75, rounded up.
* The result is the nearest power of √2, found with two comparators instead of a
  stored log table.
* `q_offset` is a signed per-layer constant. It lets the host choose the output
  scale of a layer.

## The compute fabric

* `log_pe`: three threads, one activation, a vector of three weights.
* `pe_matrix`: 6 rows x 3 columns of PEs.
  * All PEs of column c receive the same weight vector: the 2D weight array is
    broadcast.
  * `adder_net0` sums, in each PE row, the products of the same thread across the
    three columns. With zero-based names, o[3r+t] = Σc p[r][c][t], which gives
    psums o1..o18.
  * The psums are registered.
* `pe_grid`: six matrices in lockstep. Each has its own tile and its own weights,
  coming from its own SRAMs.

Adder net 0 never changes. Everything that depends on the kind of convolution is
handled by the state controller (how the tile is cut and how the weights are
arranged) and by adder net 1 (which psums are added together).

## 3x3 convolution: sectors and boundary rows

This is the least obvious part of the design.

**Input layout.** Each channel's input is cut into *sectors* of six rows. Within
a sector, every three columns form one 108-bit input word: 6 rows x 3 columns x
6 bits. Element (r,c) sits at bits (3r+c)*6. A sector's words are stored one
after another, and the sectors follow each other.

**One step per output column.** For output column x, the state controller builds
a 6x3 tile from input columns x·stride .. x·stride+2 of the current sector.
* The window usually straddles two stored words. The input SRAM therefore has two
  read ports, and the controller selects columns from words k0 and k0+1.
* Columns beyond the input width are forced to code 0.
* PE column c receives filter column c. Thread t holds filter row t.
* So psum o[3r+t] is "filter row t applied to input row r".

**Output rows that finish inside the sector.** Output row j needs input rows
j..j+2, with filter rows 0,1,2. Adder net 1 forms four such rows directly:
* lane0 = o1+o5+o9
* lane1 = o4+o8+o12
* lane2 = o7+o11+o15
* lane3 = o10+o14+o18

**Boundary rows.** The last two output rows of a sector need input rows from the
next sector. Their partial sums are kept until then:
* Row 4 of the sector needs filter rows 0,1 on input rows 4,5 now (o13+o17), and
  filter row 2 on input row 0 of the next sector.
* Row 5 needs filter row 0 on input row 5 now (o16), and filter rows 1,2 on input
  rows 0,1 of the next sector.

So each matrix has two boundary shift registers (`var_len_sr`). One stores
o13+o17 and the other stores o16. Both advance once per step and have a length
equal to the output width. A value therefore comes out exactly when the same
column of the next sector is processed. There, lane4 = SR(o13+o17)+o3 and
lane5 = SR(o16)+o2+o6 finish the two rows that belong to the previous sector.

Only 2 of the 18 psums need local storage. The registers are built as circular
buffers (one write and one read per step), not as chains of flip-flops. Their
maximum length is 2560. A per-channel layer needs only its output width (224 at
most for VGG16 and ResNet-34); the channel-summed mode below needs the output
width times the number of six-channel groups.

Each step writes to the output SRAM of its matrix through two ports:
* **port A** writes rows 6s..6s+3 of the current sector, lanes 0-3 of word
  (f·NS+s)·OW+x;
* **port B** writes lanes 4-5 into the word one sector earlier.

Here NS is the number of sectors and OW the output width. For the 12x6 example
this gives a 10x4 output in 8 clocks: clocks 1-4 produce rows 1-4, and clocks 5-8
produce rows 5-10.

**Stride 2.** The window moves two columns per step. Each sector yields these
rows:
* 3s: lane0 = o1+o5+o9;
* 3s+1: lane2 = o7+o11+o15;
* 3s-1, the boundary row, from the stored o13+o17 plus o3.

In the last sector the row below is padding, so row 3s+2 (o13+o17) is written
directly. This is the *direct tail row*. Zero padding on the right and at the
bottom gives ceil(H/2) x ceil(W/2) outputs, for example 6x3 for the 12x6 example.
Output word lanes 0..2 hold rows 3s..3s+2.

**Filters.** Each filter stays in the weight broadcast for all sectors of a
channel, and the filters run one after another. Matrix m convolves channel m with
its own weights (weight word f, bit (3c+t)·7 = filter row t, column c). This
per-channel form is depthwise convolution.

## Standard 3x3 convolution: summing over channels

Setting `ch_sum` in the layer parameters turns a 3x3 layer into a standard
convolution, in which every output sums all C input channels:
* Matrix m takes channels m, m+6, m+12, and so on. Channel group cg is channels
  6cg..6cg+5.
* For each output column the controller steps through all NC6 = ceil(C/6)
  channel groups on consecutive clocks before moving on. The loop order is
  filter, sector, column, channel group.
* Input word (cg·NS+s)·NW+k of matrix m holds that matrix's channel of group cg.
  Its weight word is f·NC6+cg.
* The core adds the six matrices' adder net 1 lanes, and matrix 0's channel
  accumulator adds the groups. It clears on the first group, and the last group
  writes matrix 0's output SRAM, in the same layout as the per-channel mode.

The boundary registers keep working per matrix and per channel. Their length
becomes OW·NC6, because that many steps now separate a column of one sector from
the same column and channel group of the next sector. Channels beyond C and
matrices without a channel get code 0.

## 1x1 convolution: channels across matrices

The 1x1 mode maps the work differently:
* PE row p is pixel p of a group of six pixels in one image row.
* PE column c of matrix m is channel 18·cg + 3m + c.
* Thread t is filter 3·fg + t.

So the grid covers 6 pixels x 18 channels x 3 filters per clock.

**Weights.** Matrix m reads weight word fg·NCG + cg. Its bits (3t+c)·7 hold
filter 3fg+t for channel 3m+c of the group.

**Input.** Word ((y·NG)+g)·NCG+cg of matrix m holds pixels 6g..6g+5 of row y, for
that matrix's three channels of group cg.

Adder net 1 of matrix M gathers psum 3M+t of matrices 0-2 and of matrices 3-5.
This is pixel M, filter t, summed over channels: lane 2t for matrices 0-2 and
lane 2t+1 for matrices 3-5. The channel accumulator adds the lane pairs, so matrix
M's output lane t is filter t at pixel M, summed over all 18 channels.

**More than 18 channels.** The channel groups are the innermost loop. The
accumulator clears on the first group and the result is written after the last.
The output of matrix m is word (fg·IH+y)·NG+g, lane t, which holds filter 3fg+t at
pixel 6g+m.

The 3x6x6 example (six filters, six channels) takes 6 clocks on matrices 0 and 1.

Padding columns, channels beyond the layer and matrices beyond the channel count
are all fed with code 0.

## Pipeline and control

| clock | stage |
|---|---|
| I | state controller presents SRAM read addresses (one step per clock) |
| I+1 | SRAM data |
| I+2 | tiles and broadcast weights registered |
| I+3 | psums registered; adder net 1 (combinational); boundary registers shift |
| I+4 | channel accumulator: pair adder register |
| I+5 | channel accumulator: accumulate |
| I+6 | post-processing register; output SRAM write |

The controller sends a `step_ctl_t` with every step: valid, mode, clear,
write-enable, two word addresses and two lane masks. The core carries it down a
register chain beside the data. `done` pulses once the last step has been written.

**Host protocol** (`conv_core` ports):
1. Write the input and weight words of each matrix through `in_*` and `wt_*`.
   `*_wsel` selects the matrix.
2. Put a `layer_params_t` on `params` and pulse `start`. It holds the mode, input
   and output width and height, channels, filters, q_offset and `ch_sum`. The
   `ch_sum` bit selects a standard 3x3 convolution, summed over channels, instead of
   a per-channel one.
3. Wait for `done`.
4. Read the results through `out_re`/`out_rsel`/`out_raddr`. Data return one
   clock later.

The host must write zeros into the input rows below the image in a partial last
sector. Columns beyond the width are masked by the core.

## Sizes

Six matrices each have:
* an input SRAM of 4096 x 108 bits;
* a weight SRAM of 1024 x 63 bits;
* an output SRAM of 4096 x 36 bits.

That totals 3.93 Mbit; the architecture calls for about 3.8 Mbit.
The boundary registers add 12 x 2560 x 19 = 0.58 Mbit. At the 224-entry length
that a per-channel design needs, they would take 51 kbit.

A layer that does not fit has to be split by the host:
* VGG16's second layer (224 wide, 64 channels, summed over channels): one sector
  of all 11 channel groups takes 11 x 76 = 836 input words per matrix. A band of 4
  sectors (24 input rows) fits in 3344 words. Its outputs take 4 x 224 = 896 words
  per filter, so 4 filters are run per pass.
* The boundary registers need 224 x 11 = 2464 entries for that layer, and VGG16's
  deeper layers need less (for example 28 x 86 = 2408).
* MobileNet's large pointwise layers are run in batches of at most 105 filters.
* Stride-1 layers with "same" padding are given a pre-padded input: 226 columns
  for 224 outputs.

## Where this RTL departs from the architecture

* **The channel sum of standard 3x3 convolution is this design's own.** The
  architecture says that each matrix processes its own channel for standard and
  for separable convolutions. It does not say where the sum over matrices and
  over channel groups is formed. Here, a cross-matrix adder feeds matrix 0's
  channel accumulator, and the boundary registers are lengthened. The per-channel
  (depthwise) form remains available with `ch_sum` cleared.
* **Kernels larger than 3x3 are not supported.** That includes ResNet-34's 7x7
  first layer, and 1x1 convolution with stride 2.
* **5x5 and 4x4 kernels** (two passes with old/new partial sums) are not built,
  and neither is **pooling**.
* **Additions made by this design:**
  * the dual-read input SRAM;
  * the dual-write, lane-masked output SRAM;
  * the circular-buffer boundary registers;
  * the mode, filter count and q_offset fields in the parameters;
  * the channel-group loop order;
  * the stride-2 padding rule;
  * the SRAM depths;
  * the fraction-bit mapping of the thread table.
* **Replaced by plain ports:** the DMA and AXI interconnect.
* **Not targeted:** the FPGA mapping (BRAM, 200 MHz).

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. `tb_ref_pkg`
holds independent reference arithmetic:
* the thread product, computed from the formula;
* the re-quantisation, computed by exact comparison of y^4 against powers of two.

| testbench | what it checks |
|---|---|
| tb_log_thread | all 128x64 code pairs |
| tb_log_pe, tb_adder_net0, tb_pe_matrix, tb_pe_grid | random tiles and weights, every product and psum |
| tb_var_len_sr | delay = len, hold, restart with a new length |
| tb_adder_net1 | every lane in all three modes, with short shift registers |
| tb_channel_accum | pair adder, accumulation groups, 2-clock latency |
| tb_post_processing | ReLU, rounding, clipping, q_offset |
| tb_input_sram, tb_weight_sram, tb_output_sram | read latency, both ports, lane masks |
| tb_state_controller | every tile, weight vector, address, mask and step count for 3x3 s1, s2 and 1x1 |
| tb_conv_core | end to end at full size, see below |

**tb_conv_core** runs the full-size core with no parameter overrides. It loads
random layers, runs them, reads back every output and compares it with a
reference convolution. There are twelve layers:
* the 12x6 3x3 example, checked to take 8 clocks;
* the 3x6x6 1x1 example, checked to take 6 clocks;
* stride-2 layers with odd widths;
* a 3x3 layer with a partial last sector;
* a 1x1 layer with 40 channels;
* standard (channel-summed) 3x3 layers over 14 channels at stride 1 and 9 channels
  at stride 2.

It counts the following and fails if any of them never occurs:
* boundary-row writes;
* stride-2 padding;
* channel accumulation;
* mode switches;
* direct tail rows;
* multi-group channel sums.

About 11,700 output codes and step counts are compared.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/neuromax_pkg.sv tb/tb_ref_pkg.sv tb/tb_conv_core.sv --top-module tb_conv_core
./obj_dir/Vtb_conv_core
```

Lint reports `rst_n` as used both synchronously and asynchronously. This comes
only from the assertions, which sample the reset; the logic itself uses an
asynchronous active-low reset throughout.

## Files

* `rtl/neuromax_pkg.sv`: sizes, codes, `conv_mode_e`, `layer_params_t`, `step_ctl_t`
* `rtl/log_thread.sv`, `log_pe.sv`, `adder_net0.sv`, `pe_matrix.sv`, `pe_grid.sv`: the compute fabric
* `rtl/var_len_sr.sv`, `adder_net1.sv`, `channel_accum.sv`, `post_processing.sv`: the adder stages and output conversion
* `rtl/input_sram.sv`, `weight_sram.sv`, `output_sram.sv`: the memories
* `rtl/state_controller.sv`: the sequencer; its header gives every address formula
* `rtl/conv_core.sv`: the top level
