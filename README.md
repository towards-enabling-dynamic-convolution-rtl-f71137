# Dynamic-parameter LeNet-5 inference core

Most FPGA CNN accelerators keep the trained weights in on-chip memory, so they are
fixed when the bitstream is built. This core does not. The host streams the weights,
along with the image, into the core for each inference. The same hardware can then run
a network trained on another data set, or run weights that were never shipped with the
device. Streaming every weight costs bandwidth, so the core can also keep some layers'
parameters on chip and stream only the others. Finally, it can run a layer that is too
large for its parameter slot in several smaller pieces, one after another, and join the
pieces in the layer's output buffer.

The RTL implements these three ways of supplying parameters for a LeNet-5 digit
classifier (MNIST, 28x28 grey image). They were first described for a Zynq (PYNQ-Z2)
system at 100 MHz, built with high-level synthesis:

| mode | what is streamed | register setting |
|---|---|---|
| all streamed | the image and every layer's parameters | `dyn_mask = 0xF` |
| partly streamed | the image, conv1 and conv2; fc layers use on-chip values | `dyn_mask = 0x1` |
| split layer | like either of the above, but conv1's six filters are run as a 4-filter pass and then a 2-filter pass through a 4-filter slot | `c1_group = 4` (default) |

The original system swapped two partially reconfigured IPs (4 filters and 2 filters)
into one reconfigurable region. Here that becomes reloading one parameter slot and
rerunning the same engine, as explained below.

## Network and number format

| step | layer | input | output | parameters (words) |
|---|---|---|---|---|
| C1 | conv 5x5, 6 filters, ReLU | 1x28x28 | 6x24x24 | 6x25 + 6 = 156 |
| S2 | max pool 2x2 | 6x24x24 | 6x12x12 | - |
| C3 | conv 5x5, 16 filters, ReLU | 6x12x12 | 16x8x8 | 16x150 + 16 = 2416 |
| S4 | max pool 2x2 | 16x8x8 | 16x4x4 | - |
| F5 | fully connected, ReLU | 256 | 120 | 30720 + 120 = 30840 |
| F6 | fully connected, ReLU | 120 | 84 | 10080 + 84 = 10164 |
| F7 | fully connected | 84 | 10 | 840 + 10 = 850 |

Only the input size and conv1 (six 5x5 filters on a 28x28 image) are fixed by the
original description. The other layers are the usual MNIST LeNet-5. So are max pooling
and ReLU.

The host converts each real value `v` to the integer `round(v * 256)` and sends it as a
32-bit word. The core saturates each word to 16 bits. It then works in signed 16-bit
fixed point with 8 fraction bits. Products (16 fraction bits) are summed in a 48-bit
accumulator that starts from the bias shifted left by 8. The result is shifted right by
8, passed through ReLU where the table says so, and saturated to 16 bits. The original
system converted the streamed integers back to floating point. This core stays in fixed
point, which may lose some accuracy that floating point would keep.

## One inference

1. The host sets `dyn_mask` and `c1_group` (AXI4-Lite). It writes 1 to register 0x00.
2. The controller takes blocks from the single input stream `IN_DATA`, in this order:
   - the image (784 words, row by row);
   - for each conv1 group: the group's weights (filter, ky, kx order), then its biases.
     The layer runs on that group as soon as they are in;
   - conv2, fc1, fc2, fc3 parameters, each only if its `dyn_mask` bit is set. A block
     is streamed just before its layer runs. Weights come in (filter, channel, ky, kx)
     order, or (output, input) for the fc layers, and biases follow the weights.

   The last word of the whole stream carries `tlast`. A missing or misplaced `tlast` sets
   bit 0 of the status register; the data is still used.
3. Layers run one at a time. Each layer reads the buffer of the layer before it and writes
   its own buffer.
4. The ten F7 outputs leave on `OUT_DATA` as sign-extended 32-bit words, with `tlast` on
   the tenth. The index of the largest one is kept as the prediction (register 0x10,
   ties to the lower class). `ap_irq` pulses, and register 0x00 reports done.

Stream lengths: 45210 words with everything streamed, and 3356 words with only conv1
and conv2 streamed.

## Splitting a layer into filter groups

This is the part of the design that differs most from an ordinary layer engine.

A `conv_layer` has a parameter slot of `NF_SLOT` filters: a weight memory of
`NF_SLOT*C*K*K` words and a bias memory of `NF_SLOT` words. It also has two run-time
inputs, `filt_base` and `filt_count`:

- Loading: the loader writes the block word by word. Words below `filt_count*C*K*K` go
  to the weight memory and the rest go to the bias memory. The split point moves with
  the group size, so a 2-filter block is packed as tightly as a 4-filter one.
- Running: the engine computes filters `0 .. filt_count-1` of the slot. It writes them
  as output channels `filt_base .. filt_base+filt_count-1` of the layer's output buffer.
  The buffer is shared by all passes, and it is where the pieces are joined.

For conv1 the controller sets `c1_base = 0` and `c1_cnt = min(c1_group, 6)`. It loads
and runs, adds `c1_cnt` to `c1_base`, and repeats until all six channels are done. With
the default 4-filter slot this gives the 4 + 2 split. Only 4x25 weights ever need to be
stored for conv1. In exchange, the second group's parameters can only be streamed after
the first pass has finished. `c1_group` can be any value from 1 to `C1_SLOT`; the
control register clamps other values. With `C1_SLOT = 6` the core can also run conv1 as
a single pass.

Only conv1 uses groups in the top level. The other layers have `NF_SLOT = NF_TOTAL` and
run in one pass, but the mechanism is generic.

## On-chip parameters

Every parameter memory after conv1 is preloaded when the FPGA is configured, so a layer
whose `dyn_mask` bit is clear uses whatever its memory holds. That is the preloaded
value, or the last streamed one if an earlier inference streamed that layer. No trained
values are available, so the preload is a fixed hash of layer number and word index
(`dcnn_pkg::static_param`), giving values in [-24, 23]. To ship a real model, replace
that function, or the `initial` loop in `weight_mem`, with the trained constants.

## Control registers (`s_axi_ctrl`)

| offset | access | contents |
|---|---|---|
| 0x00 | W | bit 0: start (ignored while busy) |
| 0x00 | R | bit 0 busy, bit 1 done (cleared by this read), bit 2 idle |
| 0x10 | R | predicted class |
| 0x18 | RW | `dyn_mask`: bit 0 conv2, 1 fc1, 2 fc2, 3 fc3 streamed (reset 0xF) |
| 0x20 | RW | `c1_group`: conv1 filters per pass, clamped to 1..C1_SLOT (reset C1_SLOT) |
| 0x28 | R | bit 0: stream framing error in the last inference |
| 0x30 | R | clock cycles of the last inference |

Start at 0x00 and the prediction at 0x10 match the host software of the original
system. The rest of the map belongs to this design.

## Timing

Each layer does one multiply-accumulate (or one pooling comparison) per clock. A run
takes `outputs x taps + 2` clocks: 86400 for C1, 153600 for C3, 30720, 10080 and 840 for
the fc layers, and 3456 + 1024 for the two pools. That adds up to about 286k clocks of
computation per image. Streamed words take at least one clock each, and computation does
not overlap with streaming. In simulation an inference takes 290k clocks with only conv1
and conv2 streamed and 338k with everything streamed, about 3 ms at 100 MHz. The
original system's reported times (several seconds) include host-side work that is not
broken down, so they cannot be compared.

## Modules

| file | role |
|---|---|
| `dcnn_pkg.sv` | sizes, number format, conversion and rounding functions, on-chip parameter formula |
| `dcnn_top.sv` | the core: control slave, controller, loader, seven layers, eight buffers, argmax |
| `dcnn_ctrl.sv` | inference sequencer, conv1 grouping, score output stream |
| `axil_ctrl.sv` | AXI4-Lite register file |
| `param_loader.sv` | AXI4-Stream sink, integer-to-fixed conversion, tlast check |
| `conv_layer.sv` | convolution / fully connected engine with parameter slot |
| `maxpool_layer.sv` | 2x2 max pooling |
| `weight_mem.sv` | parameter memory, optionally preloaded |
| `fm_buffer.sv` | feature-map buffer (simple dual-port RAM, 1-clock read) |
| `argmax_unit.sv` | running maximum of the class scores |

The top's parameter `C1_SLOT` (default 4) sets the conv1 slot size. The layer sizes are
constants in `dcnn_pkg`. Memories total 815552 bits.

Outside the core, and not part of this RTL: the Arm host that converts and streams the
parameters, the DMA engine and interconnect that feed the two streams from DDR, and the
partial-reconfiguration controller of the original system.

## Simulation

Each `tb/tb_<module>.sv` is a self-checking testbench. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dcnn_pkg.sv tb/tb_dcnn_top.sv \
          --top-module tb_dcnn_top -o sim && ./obj_dir/sim
```

- `tb_dcnn_top` runs the core at its default size through four inferences: partly
  streamed, all streamed, groups of 3 with a saturating input pixel, and a misplaced
  `tlast`. The input stream has random gaps and the output has back-pressure. It compares
  all scores and the prediction with a fixed-point reference model in the testbench, and
  counts each mechanism (conv1 passes, on-chip layers, stalls, back-pressure, saturation,
  framing error). It runs in about a second after a one-minute build.
- `tb_lenet_methods` uses a 6-filter conv1 slot. It runs the three modes in their
  original form: partly streamed with conv1 in one pass, all streamed in one pass, then
  the 4 + 2 split.
- The unit testbenches (`tb_conv_layer`, `tb_maxpool_layer`, `tb_param_loader`,
  `tb_dcnn_ctrl`, `tb_axil_ctrl`, `tb_argmax_unit`, `tb_weight_mem`, `tb_fm_buffer`)
  check each block against values computed in the testbench, including latencies.

The test images and weights are random. No trained network or MNIST data is included,
so classification accuracy is not measured; the arithmetic is checked exactly instead.

## Departures and open points

- Fixed point (Q7.8, 48-bit accumulation) instead of floating point after streaming.
- Layer sizes after conv1, pooling type and activation are assumptions (standard LeNet-5).
- The three modes are register settings of one core. In the original they were separate
  builds, plus a reconfigurable region holding one of two conv1 IPs.
- Splitting conv1 across devices ("nodes") is a system-level use of the same mechanism:
  each device would run one filter group. This RTL covers one device.
- On-chip parameter contents are placeholders.
- One MAC per layer, with no overlap between streaming and computing. The throughput
  choices of the original synthesized IPs are not described, so this core is not sized
  to match their resource figures.
