# ShortcutFusion accelerator in SystemVerilog

This is a CNN inference accelerator. Its main idea is that the weight-reuse
scheme is chosen per layer, and on-chip memory is handed out to match.
Shallow layers have large feature maps and few weights. They run in
**row-based weight reuse**: the layer's weights are copied once into an on-chip
buffer, and the input streams through a small row buffer. Deep layers have small
feature maps and many weights. They run in **frame-based weight reuse**: every
weight block is read from DRAM once and swept over a whole frame that stays
on-chip. Three interchangeable physical buffers hold inputs, outputs, shortcut
(residual) tensors or preloaded weights, as each layer's instruction says. So
a residual shortcut can often be kept on-chip until the element-wise addition
that consumes it. That addition is fused into the output stream of the
convolution. Its second operand is fetched at the moment the convolution
result arrives.

The RTL is synthesizable SystemVerilog (IEEE 1800-2017), with 8-bit feature
maps and weights. At its default parameters it has the main configuration's
64 input x 64 output channel parallelism: 2048 DSP-packed MACs, giving 4096
multiplications per cycle for normal convolution and 2048 for depthwise.

## Data format and parallelism

* A **word** is 512 bits: one 8-bit value for each of 64 channels (a "channel
  group"). Buffers, the row buffer, the DRAM port and the output stream all
  move whole words. A feature map with C channels is stored as ceil(C/64)
  groups. The word address is `base + (group*H + y)*W + x`.
* Feature maps are signed or unsigned 8-bit. Each instruction says which
  applies to its input and to its output.
* Weights are 8-bit codes with a zero point (`w_zero` in the instruction). The
  weight fetcher converts them to a 9-bit signed value `q - w_zero`. That is
  why the multipliers are 9x9-bit signed.
* Partial sums are 32 bits per lane.

## The shared MAC (sf_shared_mac)

One DSP-style multiplier produces two products that share the input I:

```
A = (W1 << 18) + W0          27 bits   (W1 at bits 26..18, W0 from bit 0)
D = I                        18 bits
P = A * D = I*W1*2^18 + I*W0
Mult0 = P[17:0]
Mult1 = P[35:18] - {18{P[17]}}   // undo the borrow of a negative low product
```

The correction is needed because a negative `I*W0` borrows from the upper
field. In depthwise mode there is no shared operand. Three multiplexers then
select the depthwise operands, and the second weight is forced to zero, so the
same multiplier computes one product. The testbench checks both modes against
direct products over the full operand range -255..255.

## CONV kernels (sf_mac_array, sf_conv_kernel, sf_conv_engine)

A **MAC array** is 32 shared MACs with two 32-input adder trees, OUT0 and OUT1.
A **CONV kernel** is two arrays and produces two output channels:

* Normal convolution: the 64 input channels are split into I[31:0] for the top
  array and I[63:32] for the bottom one. The kernel forms
  `CH0 = top.OUT0 + bottom.OUT0` and `CH1 = top.OUT1 + bottom.OUT1`. These are
  accumulated over the K*K window positions, one position per cycle, starting
  from a *preset* value. The preset is zero, or the partial sum of the earlier
  input-channel groups read from the out buffer.
* Depthwise convolution: each array holds a whole KxK window of its own
  channel in its first K*K MACs (K = 1, 3 or 5). So one cycle gives DW0 (top)
  and DW1 (bottom). These bypass the accumulator.

`sf_conv_engine` has 32 kernels: 64 output channels, 2048 MACs. The published
text says each kernel has four adder trees, 256 in total. That does not agree
with 2048 MACs, which give two trees per array and 128 in total. This RTL
follows the MAC count.

## How a group runs (sf_dataflow_ctrl)

A group is one convolution with its fused post-processing. The controller
first decodes the instruction and loads the batch-norm parameters of all
output groups. It then runs one of two loop nests:

**Row reuse**
```
preload all weights of the layer: DRAM -> buffer 1 (at wbuf_base)
for oy:                                 // output row
  bring the input rows that are still missing into the 6-row circular buffer
  for og, ig:                           // output / input channel group
    load weight block (og, ig) from buffer 1 into the free weight bank
    for ox: window -> K*K MAC cycles -> partial sum (out buffer, address ox)
```
**Frame reuse**
```
for og, ig:
  load weight block (og, ig) from DRAM into the free weight bank
  for oy:  bring input rows of group ig (DRAM or on-chip) into the row buffer
    for ox: window -> MAC -> partial sum (out buffer, address oy*OW+ox)
```

On the last input-channel group, each result goes into the post-processing
chain instead of the out buffer. Every input row is read once per (og, ig)
sweep in frame mode and once per output row band in row mode. Every weight is
read from DRAM once per layer in both modes.

The row buffer has six slots: five window rows plus one for prefetching. It is
used circularly. The slot of window row r is `(slot0 + r) mod 6`. `slot0`
advances by the stride for each output row, so rows that are still needed stay
in place. Zero padding is applied in the window register, which clears taps
outside the image. Padding is never stored.

Per output pixel, the schedule is K cycles to fill the window, then K*K MAC
cycles (1 for depthwise), one output cycle and one step cycle. Loading is
**not** overlapped with computing. A weight block or input row is loaded, then
the computation continues. This is the largest departure from the published
design. It makes the cycle counts here much higher than the published
latencies. The arithmetic and the memory traffic pattern are unaffected.

## Post-processing chain

Each stage has a valid/ready handshake, so a stall anywhere (a shortcut read
from DRAM, a full write FIFO) holds the stages in front of it.

1. **sf_batch_norm**: `y = acc*scale + bias`, with a 16-bit scale and a 32-bit
   bias per channel. Six parameter words per output group are loaded from DRAM
   at group start. Word layout: words 0 and 1 hold the scales, words 2-5 the
   biases.
2. **sf_activation_quant**: a dynamic fixed-point step. It applies a rounding
   right shift by `q_shift`, then saturates to signed or unsigned 8 bits. Then
   comes ReLU, or a 256-entry table for sigmoid and one for swish, indexed by
   the 8-bit code. Two tables per lane fill one 512x8 memory. The host writes
   them through the `lut_*` port.
3. **sf_maxpool**: 2x2, stride 2. It uses a pair register and a line memory of
   half-row maxima.
4. **sf_avepool**: global average pooling. It keeps per-channel sums over the
   map and outputs `(sum*avg_mult + 2^15) >> 16`, with
   `avg_mult = 65536/(H*W)`.
5. **sf_eltwise**: the shortcut addition, saturating 8-bit. When a word
   arrives, the stage reads the shortcut word at the same (group, y, x). The
   read goes to an on-chip buffer through the crossbar, or to DRAM.
6. **sf_upsample**: 2x nearest. Each word leaves four times with doubled
   coordinates.
7. **sf_dma_write**: turns the coordinates into an address. It writes
   directly into an on-chip buffer, or through a 1024-word FIFO to DRAM.

## Memories and their connections

| Memory | Default size | Use |
|---|---|---|
| buffers 0/1/2 (`sf_fm_buffer`) | 16384 x 512 bit each | feature maps, shortcut tensors, preloaded weights (buffer 1) |
| row buffer | 6 x 1024 words | input rows (row mode: all input groups of a row side by side) |
| weight register | 2 banks x 9 positions x 64 x 64 x 9 bit | double-buffered weight block |
| out buffer | 4096 x 64 x 32 bit | partial sums |
| write FIFO | 1024 words | outputs to DRAM |

`sf_crossbar` connects three read ports (input fetch, shortcut, weight fetch)
and two write ports (outputs, weight preload) to the three buffers. The
selection comes from the `alloc_*` fields of the instruction. Assertions flag
two ports hitting one buffer in the same cycle. `sf_mem_ic` shares the single
512-bit DRAM port among five requesters: instruction reader, input fetch,
weight fetch, shortcut read and output writer. It arbitrates round robin and
returns read data in order.

## Instruction stream (sf_cnn_ctrl)

DRAM holds 32-bit words, packed 16 per 512-bit word. Word 0 is the
configuration flag. Bit 0 must be set for the stream to run. Word 1 is the
number of groups. Each group then takes 11 words, laid out as the packed
struct `instr_t` in `sf_pkg.sv` (word 0 first):

| word | contents |
|---|---|
| 0 | flags: layer_start, depthwise, reuse_sel, kernel, stride, pad, alloc_in/out/sc, fuse_eltwise, maxpool, avepool, upsample, activation, input signed, output unsigned |
| 1 | in_width, in_height |
| 2 | in_channels, out_channels |
| 3 | q_shift, w_zero, avg_mult |
| 4-9 | in_base, out_base, sc_base, w_base, bn_base, wbuf_base |
| 10 | reserved |

The word count (11) and several field names follow the original design. The
bit layout is this implementation's own.

Weight layout in DRAM:
* Normal convolution: word `((og*IG + ig)*K*K + pos)*64 + oc`, byte ic.
* Depthwise: word `og*64 + c`, byte = tap `r*K + c`.

## Top level (sf_top)

Ports:
* `start`, `instr_base`, `busy`, `done`, `cfg_flag` and `groups_done`.
* The LUT load port.
* One DRAM request port: `m_valid`/`m_ready`/`m_req` for requests,
  `m_rvalid`/`m_rdata` for in-order read data.

The host side (PCIe DMA, DDR4) is outside. The testbench uses a behavioural
DRAM (`tb/sf_dram_model.sv`) with a random-stall handshake and a fixed read
latency.

Default parameters: `BUF_DEPTH=16384`, `ROW_WORDS=1024`, `PSUM_DEPTH=4096`,
`OG_MAX=32` (up to 2048 channels), `WB_DEPTH=1024`, `LINE_DEPTH=4096`. Limits
that follow from them:
* Row mode needs `ceil(Cin/64) * W <= 1024`.
* Frame mode needs `OW*OH <= 4096`.
* Row-mode weights must fit in buffer 1.
* Kernels are 1x1, 3x3 or 5x5, with stride 1 or 2.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

* `tb_sf_shared_mac`, `tb_sf_adder_tree`, `tb_sf_mac_array`,
  `tb_sf_conv_kernel` and `tb_sf_batch_norm` compare the arithmetic blocks
  with values computed in the testbench. The kernel test also checks the
  one-cycle result latency.
* `tb_sf_top` runs the whole accelerator at its default parameters. It runs
  a seven-group network with random data, covering:
  * row and frame reuse;
  * two input-channel groups, so partial sums are preset from the out buffer;
  * 1x1, 3x3 and 5x5 kernels, including depthwise;
  * strides 1 and 2;
  * ReLU, sigmoid and swish;
  * max pooling, global average pooling and up-sampling;
  * shortcuts from an on-chip buffer and from DRAM;
  * outputs to DRAM and to all three buffers.

  A behavioural reference model computes every group. Every word the model
  writes, in DRAM and in the buffers, is compared with the design's. The test
  also counts each mechanism and fails if one never happened, for example:
  row and frame groups, weight preload, preset use, shortcut reads from DRAM
  and from a buffer, chain back-pressure, DRAM stalls, contention on the
  DRAM port and zero padding. It finishes in about 21,000 cycles, a few
  seconds in Verilator.

The other blocks are checked through `tb_sf_top`. For each of them a
deliberately broken copy was run against it, and the test catches the fault.

To simulate:

```
verilator --binary --timing --top-module tb_sf_top rtl/sf_pkg.sv rtl/*.sv \
          tb/sf_dram_model.sv tb/tb_sf_top.sv && obj_dir/Vtb_sf_top
```

Lint warnings left in place:
* Width warnings where constant zeros are replicated into large arrays.
* Unused bits of shared structs.
* `rst_n` used both as an asynchronous reset and in the `disable iff` of
  assertions.

## Departures from the original design and what is missing

* **No overlap of loading and computing.** The sixth row-buffer slot and the
  second weight bank exist, but the controller does not yet load while it
  computes.
* **No concatenation or route layers, no Squeeze-and-Excitation channel
  scaling, no 7x7 kernels, no 3x3 max pooling.** So YOLO v2/v3, ResNet and
  EfficientNet cannot run end to end as they are. VGG-style networks can.
* **The DRAM port is a simple one-word request/response interface**, not
  AXI4.
* **8-bit only.** The 16-bit configuration used for one comparison in the
  original work is not built.
* **Buffer sizes are fixed by parameters.** The original design sizes them
  per network from its buffer equations.
* **Group instruction bit layout, parameter memory layout, batch-norm format,
  activation table indexing and the order of the post-processing stages are
  this implementation's choices.**
* **The host software is not part of this RTL.** It parses the network, picks
  the reuse mode for each layer and allocates the buffers. Instructions must
  be written by hand, as `tb_sf_top` does.
