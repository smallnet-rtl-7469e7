# smallNet: a streaming 2x2-convolution digit classifier in SystemVerilog

smallNet classifies 28x28 grayscale handwritten digits (MNIST) with a very small
convolutional network of only 510 trained parameters. It is built to fit cheap
FPGAs and to carry over to an ASIC, so it uses no vendor cores. Every layer is a
small hand-written block. The blocks are chained into one streaming pipeline:
pixels go in at one end in raster order, one per clock, and a 4-bit digit comes
out at the other. No feature map is ever stored whole. Each layer keeps only the
row or half-row it still needs.

This RTL is a reconstruction of the design described in *smallNet:
Implementation of a convolutional layer in tiny FPGAs* (F. Zapata Bascuñán,
A. E. Fuster). That paper describes the layer structure, the convolutional
neuron (a window, parallel MACs with bias, an activation and a control FSM) and
the system around it on a Zynq-7000. Where it gives no detail, this code makes
its own choices: number format, timing, handshakes and the loading of weights.
The section [Departures and open points](#departures-and-open-points) lists
them.

## The network

| stage | operation | output | parameters |
|---|---|---|---|
| input | 28x28x1 grayscale, Q16.16 per pixel | 784 values | - |
| conv1 | 1 filter 2x2, stride 1, "same" padding, ReLU | 28x28 | 4 + 1 bias |
| pool1 | max 2x2, stride 2 | 14x14 | - |
| conv2 | 1 filter 2x2, stride 1, "same" padding, ReLU | 14x14 | 4 + 1 bias |
| pool2 | max 2x2, stride 2 | 7x7 = 49 | - |
| dense | 49 -> 10, sigmoid | 10 scores | 490 + 10 biases |
| max finder | arg-max | 4-bit class 0..9 | - |

That makes 510 parameters, or 2040 bytes at 32 bits each. The flatten step
between pool2 and the dense layer costs no hardware. pool2 already emits its 49
values in row-major order, which is the flatten order for a single channel.

## Number format

Every value is a 32-bit two's-complement fixed-point number in Q16.16: 16
integer bits and 16 fraction bits. This covers pixels, weights, biases and
activations (`smallnet_pkg::fx_t`). The 32-bit width comes from the source. The
Q16.16 split is this design's choice.

- **Multiply:** the full 64-bit product is shifted right by 16 bits, truncating
  toward minus infinity. It is then clipped to the 32-bit range.
- **Add:** every addition saturates at `0x7FFFFFFF` and `0x80000000` instead of
  wrapping around. Saturation is visible outside the network: the `sat` outputs
  of the layers, and `sat_event` at the top, pulse when a product or a sum
  clipped.
- **ReLU** is `max(0, x)`.
- **Sigmoid** uses the piecewise-linear "PLAN" approximation. It needs only
  shifts and adds. For `|x| >= 5` it gives 1. For `2.375 <= |x| < 5` it gives
  `|x|/32 + 0.84375`. For `1 <= |x| < 2.375` it gives `|x|/8 + 0.625`. Below 1
  it gives `|x|/4 + 0.5`. Negative inputs use `y(-x) = 1 - y(x)`. The curve
  rises monotonically but is flat beyond `|x| = 5`. Two large dense sums can
  therefore tie at 1 where an exact sigmoid would still rank them. The max
  finder then picks the lower class index.

`tb/smallnet_ref_pkg.sv` is a bit-exact software model of this arithmetic. It
is written separately from the RTL, and every testbench compares against it.

## The convolutional neuron (`conv_layer`)

This is the block the source describes in most detail, and the one with the
most timing subtleties.

**Padding as a grid walk.** Keras pads an even 2x2 kernel with "same" padding
by adding one zero column on the right and one zero row at the bottom. Output
pixel `(r, c)` is therefore:

    out(r,c) = act( b + w00*x(r,c) + w01*x(r,c+1) + w10*x(r+1,c) + w11*x(r+1,c+1) )

Here `x` is zero outside the image. The control FSM (`conv_ctrl`) walks a padded
grid of `(H+1) x (W+1)` positions, one position per cycle. Its state is simply a
row counter and a column counter.

- At a real position it takes the next pixel from the input stream.
- At a padding position (last column or last row) it takes nothing and feeds a
  zero instead. `in_ready` is low for that cycle.

**Window.** `conv_window` is a shift register of `W+3` words: one padded row
plus two pixels. After the grid position `(r, c)` is shifted in, its taps hold
the pixels at `(r-1,c-1)`, `(r-1,c)`, `(r,c-1)` and `(r,c)`. That is exactly the
neighbourhood of output pixel `(r-1, c-1)`. The FSM raises `win_valid` whenever
`r >= 1` and `c >= 1`. That happens for exactly `W*H` grid positions per image,
so the output has the size of the input.

**Parallel MACs.** Four `fx_mac` units work in parallel, one per kernel tap.
Each computes its product in the same cycle. The first unit starts its sum from
the bias instead of zero. A saturating adder tree, `(lane0 + lane1) + (lane2 +
lane3)`, then adds the four lanes, and the activation follows. The order of the
additions matters only when a partial sum saturates. The reference model uses
the same order.

**Pipeline and timing.** The layer has three register stages: the window, the
MACs, and the output with its activation. All three move together on
`adv = !out_valid || out_ready`. If the next layer does not take a pixel, the
whole layer, and with it the input, stands still.

| measure | value |
|---|---|
| latency | output pixel valid two clock edges after the edge that shifted in the pixel completing its window |
| throughput | one grid position per cycle |
| cycles per image | `(W+1)*(H+1)`: 841 for 28x28, 225 for 14x14 |

**Weights.** Five registers hold the weights, loaded through `wr_en/wr_addr/wr_data`:
taps `w00, w01, w10, w11` at addresses 0..3 and the bias at address 4.

**Other kernel sizes.** The three convolution blocks take a kernel-size
parameter `K` (default 2), which the network leaves at 2.

- **Padding:** "same" padding follows the Keras rule. `PT = (K-1)/2` zero rows
  and columns go before the image, and `K-1-PT` after it. The grid becomes
  `(H+K-1) x (W+K-1)`.
- **Window:** it holds `K-1` padded rows plus `K` pixels. Tap `i*K+j` is kernel
  row `i`, column `j`.
- **MACs:** there are `K*K` of them. The adder tree pads the lanes with zeros
  to a power of two.
- **Weights:** the taps sit at addresses `0..K*K-1` in raster order, and the
  bias at `K*K`.
- **Timing:** when `PT > 0`, the leading padding rows are walked while the
  layer waits for the next image.

The 2x2 and 3x3 cases are both tested.

## Pooling, dense layer and max finder

**`maxpool2x2`** takes the maximum of each non-overlapping 2x2 block.

- The left pixel of each horizontal pair waits in a register.
- On even rows, the maximum of each pair goes into a half-row buffer of `W/2`
  words.
- On odd rows, the pair maximum is compared with the stored value, and the
  result leaves as one output word.

The block emits one output for every four inputs, one cycle after the input
that completes the block.

**`dense_layer`** runs ten MACs in parallel, one per neuron, and takes one input
value per cycle.

- The weight memory is organised as one row of ten weights per input index, so
  all ten neurons read their weight in the same cycle.
- The first input of a vector starts each sum from the neuron's bias.
- After the 49th input, the ten sums pass through the sigmoid into the output
  register.
- `in_ready` drops for that one cycle, so a vector costs 50 cycles.

**`max_finder`** picks the index of the largest of the ten scores, signed. On a
tie the lower index wins. It registers the 4-bit class together with the
winning score.

## Streams, back-pressure and rates

All block-to-block links are valid/ready streams. A word moves on a rising edge
at which both `valid` and `ready` are high. Once a word is offered, it stays
unchanged until it is taken. `smallnet` asserts this rule on its class output.
Back-pressure travels all the way up the chain. In the end-to-end test, a class
left unacknowledged stalls the dense layer, the second pooling layer, the
second convolution and then the first pooling layer.

The first convolution sets the pace of the whole pipeline, at 841 cycles per
image. Every later layer has spare cycles:

| layer | work per image |
|---|---|
| conv1 | 841 cycles |
| conv2 | 225 grid positions |
| dense | 50 cycles |

With a full input stream, classes come out exactly 841 cycles apart
(`tb_smallnet` checks this). An image's class is taken, with `out_ready` high,
on the 57th clock edge after the edge that took its last pixel. `tb_smallnet`
measures this. Most of that time
is the padding row of conv1 (29 positions) and of conv2 (15 positions).

## System integration (`smallnet_pl`)

In the source system, a processor's DMA streams each image into the
programmable logic. The class is read back over a 4-bit GPIO after an
interrupt. `smallnet_pl` is the programmable-logic side of that system:

    DMA --s_axis--> stream_fifo --> smallnet --> result_irq --> gpio_class, gpio score, irq
                                                    ^
                                          irq_ack --+ (from GPIO)

- **`s_axis_tvalid/tready/tdata`** carry one Q16.16 pixel per 32-bit word, in
  raster order. Images are framed by count: 784 words make one image, and
  TLAST is not needed.
- **`stream_fifo`** (32 words, first-word fall-through) absorbs the 57 padding
  cycles of every image. Without it the DMA would have to stop at the end of
  every row.
- **`result_irq`** stores the class and its score, raises the level interrupt
  `irq` and holds both until `irq_ack`. While `irq` is high no new class is
  accepted, so an unread result is never overwritten. `done_count` counts the
  delivered results.
- **Parameter loading:** `wr_en/wr_addr/wr_data` write the 510 parameters at
  flat addresses:

  | addresses | contents |
  |---|---|
  | 0..3, 4 | conv1 taps, conv1 bias |
  | 5..8, 9 | conv2 taps, conv2 bias |
  | `10 + n*49 + i` | dense weight of neuron `n`, input `i` |
  | `500 + n` | bias of neuron `n` |

  Write the parameters before streaming an image. To hardcode a trained set, as
  the source does, drive this port from a ROM at start-up or replace the
  registers with constants.
- **`sat_event`**, `class_score` and `fifo_count` are status outputs for
  debugging.

The processor, the DMA, the AXI interconnect, the GPIO core, the interrupt
concatenation and the UART are vendor parts, so they are not written here.
Their connections are the ports of `smallnet_pl`.

## Departures and open points

- **Activation functions.** The source gives two versions. Its Keras model uses
  a sigmoid after every layer. Its hardware description names ReLU after the
  convolutions and a sigmoid only at the dense output. This RTL follows the
  hardware description. `CONV_ACT`/`DENSE_ACT` on `smallnet` (and `ACT` on each
  layer) select `ACT_RELU`, `ACT_SIGMOID` or `ACT_NONE`. Weights trained with
  sigmoid convolutions need `CONV_ACT = ACT_SIGMOID`. Both variants are
  tested, with the same timing.
- **Parameter count.** The source says both 510 and 550. The layer list gives
  510, which is what is built.
- **Four MACs, four channels.** The source's block diagram shows four MACs,
  each followed by a bias adder, and four output channels. Here the four MACs
  are the four taps of the 2x2 kernel, and the bias is added once per sum. Only
  one output channel exists, because each convolution has a single filter. The
  diagram also places the weight multiplication before the window. Here the
  window comes first and the MACs multiply. The sum is the same.
- **Feature-map storage.** The source keeps intermediate feature maps in
  block RAM and registers. Here no map is stored whole. Each layer keeps only
  its line buffer or half-row buffer, and the synthesis tool may map these to
  RAM or flip-flops. Of the buffers, only the dense weights are large enough to
  be worth a block RAM.
- **No trained weights.** The trained values are not published, so they cannot
  be hardcoded here. The write port replaces the hardcoding. For that reason
  this code does not reproduce the classification accuracies reported for the
  original (about 88% in fixed-point simulation, 81% on 23 test images in
  hardware).
- **Own choices.** None of the following is specified in the source:
  - Q16.16 split, truncating multiply, saturation everywhere
  - sigmoid approximation
  - synchronous active-low reset `rst_n`
  - valid/ready handshakes and back-pressure
  - FIFO depth
  - level interrupt with acknowledge
  - tie rule of the max finder
- **Resource figures.** The source's vendor tool reports 2052 LUTs (of 14,400
  on the device), 1587 flip-flops, 48 DSP slices and 25 KB of block RAM. These
  figures have not been compared with this RTL. Two memories dominate storage
  here: the dense weights (15,680 bits) and the line buffers.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle-limit watchdog. Expected values
come from `smallnet_ref_pkg`, never from the RTL.

| testbench | what it checks |
|---|---|
| `tb_fx_mac` | random MAC updates with and without `clr`; saturation of products and sums |
| `tb_activation` | ReLU, sigmoid and identity at all breakpoints, extremes and random values |
| `tb_conv_window` | 2x2 and 3x3 window taps against the stream history, with idle cycles |
| `tb_conv_ctrl` | padded-grid walk for 2x2 and 3x3 kernels under random stalls; pad, take and valid positions; `(W+K-1)(H+K-1)` cycles per frame |
| `tb_conv_layer` | 2x2 and 3x3 kernels: random images and weights under random gaps and back-pressure; saturating image; first-output latency and frame cycles |
| `tb_maxpool2x2` | random signed maps under gaps and back-pressure |
| `tb_dense_layer` | full 49x10 layer with random weights; saturation; 50 cycles per vector |
| `tb_max_finder` | random, negative and tied scores; lowest index wins |
| `tb_stream_fifo` | random push and pop against a queue; full and empty flags; count |
| `tb_result_irq` | cycle-by-cycle model of class and score hold, interrupt, acknowledge and hold-off |
| `tb_smallnet` | whole pipeline at 28x28 against the reference network; classes 841 cycles apart at full rate; a second network with sigmoid convolutions in lockstep |
| `tb_smallnet_pl` | full top at default parameters, as DMA and processor (see below) |

`tb_smallnet_pl` acts as the DMA and the processor:

- It loads two random parameter sets. It then streams 23 images back to back,
  6 with the first set and 17 with the second. That is as many images as the
  original hardware validation used, but random ones. One image has every
  pixel at the maximum value.
- It takes each interrupt, checks the class and score against the reference,
  and acknowledges.
- It counts how often each mechanism happened and fails if one never did:
  padding zeros in both convolutions, FIFO full, inter-layer stalls reaching
  pool1, results held by a pending interrupt, saturation, and one interrupt per
  image.

Everything runs at the default sizes. A full image takes well under a second
of simulation.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/smallnet_pkg.sv tb/smallnet_ref_pkg.sv tb/tb_smallnet_pl.sv \
        --top-module tb_smallnet_pl
    ./obj_dir/Vtb_smallnet_pl

Replace `tb_smallnet_pl` with any other testbench name. Verilator is a two-state
simulator, so all state that is ever read is reset or written before use.

## Files

| file | contents |
|---|---|
| `rtl/smallnet_pkg.sv` | `fx_t`, saturating add and multiply, activation kinds, address map |
| `rtl/fx_mac.sv` | multiply-accumulate unit |
| `rtl/activation.sv` | ReLU, sigmoid (PLAN) and identity |
| `rtl/conv_window.sv` | KxK window line buffer |
| `rtl/conv_ctrl.sv` | padded-grid control FSM |
| `rtl/conv_layer.sv` | convolutional neuron |
| `rtl/maxpool2x2.sv` | 2x2 max pooling |
| `rtl/dense_layer.sv` | 49 -> 10 fully connected layer |
| `rtl/max_finder.sv` | arg-max |
| `rtl/smallnet.sv` | the network pipeline |
| `rtl/stream_fifo.sv` | input FIFO |
| `rtl/result_irq.sv` | class register and interrupt |
| `rtl/smallnet_pl.sv` | programmable-logic top |
| `tb/smallnet_ref_pkg.sv` | bit-exact reference model |
| `tb/conv_ctrl_tester.sv`, `tb/conv_layer_tester.sv` | test sequences for one kernel size, run twice by `tb_conv_ctrl` and `tb_conv_layer` |
| `tb/tb_*.sv` | testbenches |
