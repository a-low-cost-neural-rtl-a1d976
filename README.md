# dsODENet accelerator core

A residual CNN such as ResNet stacks many building blocks, each with its own
weights. A Neural ODE reads the residual update `z_{t+1} = z_t + f(z_t)` as
one Euler step of an ordinary differential equation, so it can use **one**
block with **one** set of weights, executed `C` times. dsODENet goes one step
further and builds that block from depthwise separable convolutions (a 3x3
per-channel filter followed by a 1x1 channel mix). With both tricks, the
whole three-stage network needs only about 0.55 M parameters. That is few
enough to keep every weight and feature map in on-chip memory next to the
arithmetic, with no DRAM traffic during inference.

This repository is synthesizable SystemVerilog for the accelerator core of
that network: the repeated middle of the model. The 3-channel image is first
turned into a 64-channel 8x8 map by a convolution on the host. The core takes
that map over a 32-bit AXI4-Stream, runs

```
ODEBlock1 (64 ch, 8x8) --C x--> Downsampling1 --> ODEBlock2 (128 ch, 4x4) --C x-->
Downsampling2 --> ODEBlock3 (256 ch, 2x2) --C x--> global average pool --> 256 values
```

and streams back the 256 features. The host applies the final
fully-connected classifier. `C = 10` by default and can be set at run time.

## Contents

| file | what it is |
|---|---|
| `rtl/dsode_pkg.sv` | number formats, 8-lane vector types, saturation |
| `rtl/fmap_buffer.sv` | feature-map buffer, 8 channel banks |
| `rtl/weight_mem.sv` | parameter array, 8 lane banks |
| `rtl/add_time.sv` | AddTime: writes the time channel |
| `rtl/depthwise_conv.sv` | 3x3 depthwise convolution, 8 channels per cycle |
| `rtl/pointwise_conv.sv` | 1x1 convolution, 8 output channels per cycle |
| `rtl/full_conv.sv` | normal KxK convolution (Downsampling1, shortcut convs) |
| `rtl/batchnorm_relu.sv` | folded batch norm, optional shortcut add, ReLU |
| `rtl/ode_block.sv` | one ODEBlock with its iteration sequencer |
| `rtl/downsampling_block.sv` | stride-2 residual block, normal or DSC |
| `rtl/avg_pool.sv` | 2x2 -> 1x1 average |
| `rtl/axi_lite_ctrl.sv` | control registers |
| `rtl/dsodenet_top.sv` | the core: registers, stream packing, block chain |
| `tb/` | one self-checking testbench per module, a reference model (`tb_ref_pkg.sv`), an end-to-end test and a full-size test |

## Numbers and memory layout

All arithmetic is signed fixed point with 12 fractional bits.

- **Formats.** Feature maps and batch-norm parameters are 24 bits wide.
  Convolution weights are 20 bits wide.
- **Accumulation.** Products are summed exactly in 48 bits.
- **Rounding.** At the end of a dot product the sum is shifted right
  arithmetically by 12 and saturated to 24 bits.
- **Ownership.** The widths are the published ones. The binary point, the
  rounding (toward minus infinity) and the saturation are this design's
  own choices.

Every compute unit works on **8 lanes**, which is the published unrolling
factor. A feature-map buffer is therefore split into 8 banks by channel:
channel `c` of pixel `p` (row-major) is in bank `c % 8` at word
`(c / 8) * H * W + p`. One read returns the same pixel of 8 consecutive
channels, called a *channel group*. A parameter array is split the same way
by output channel, so one read gives each lane its own weight.

## Inside an ODEBlock

One iteration `t` (t = 0 .. C-1) computes

```
a = ReLU(BN1(PW1(DW1([z ; t]))))
z = ReLU(BN2(PW2(DW2([a ; t]))) + z)
```

`[x ; t]` is `x` with one extra channel, filled with the value `t`. This is
how the ODE's time enters the convolutions (the *AddTime* unit). The
depthwise convolutions therefore see `N+1` channels, and the pointwise
convolutions map `N+1` channels back to `N`. The same weights are used in
every iteration; only the time channel changes.

Three buffers hold the data:

| buffer | size (words per bank) | holds |
|---|---|---|
| A | ceil((N+1)/8) * H * W | the working map: input of the depthwise convs, output of the pointwise convs and of BN1, plus the time channel |
| B | ceil((N+1)/8) * H * W | the depthwise results |
| S | ceil(N/8) * H * W | `z`, the iteration's input, kept for the shortcut add |

A phase sequencer runs eight units, one after the other: AddTime, DW, PW,
BNReLU, then AddTime, DW, PW, BNReLU again.

- The last BNReLU reads `BN2(...)` from A and `z` from S at the same
  address. It writes the new `z` both to S (for the next shortcut) and to A
  (the next iteration's input), so no copy is needed.
- With `n_iter = 0` the input map goes straight to the output.
- The time channel holds the value `t << 12`, so `t` is a whole number in
  the fixed-point format. The step size is 1.

**Cycle count.** Let `P = H*W`, `G = ceil(N/8)` and `G1 = ceil((N+1)/8)`.
One iteration takes exactly

```
2 * ( (P+2)  +  (G1*P*9 + 4)  +  (G*P*(N+1) + 4)  +  (G*P + 4) )
     AddTime    depthwise         pointwise            BNReLU
```

cycles. Each convolution unit does one multiply per lane per cycle, so the
pointwise layers dominate.

| block | cycles per iteration | x C = 10 |
|---|---|---|
| ODEBlock1 (64 ch, 8x8) | 78,108 | 781,080 |
| ODEBlock2 (128 ch, 4x4) | 71,516 | 715,160 |
| ODEBlock3 (256 ch, 2x2) | 68,460 | 684,600 |

## Downsampling blocks

Both downsampling blocks halve the map and double the channels:

```
r = SC(x)                        1x1 convolution, stride 2, no batch norm
a = ReLU(BN1(CONV1(x)))          stride 2
y = ReLU(BN2(CONV2(a)) + r)      stride 1
```

- **Downsampling1** (`DSC = 0`) uses normal 3x3 convolutions (`full_conv`).
  Its unit computes 8 output channels at once and walks through every input
  channel and tap. It takes 459,284 cycles, the longest single stage.
- **Downsampling2** (`DSC = 1`) replaces each 3x3 convolution with a
  depthwise 3x3 followed by a pointwise 1x1. It takes 67,548 cycles.

Only the second block uses DSC. This follows the published design, which
kept normal convolutions in the first block for accuracy. A downsampling
block runs once per image.

Compute for one image at the default size is 2,707,672 cycles, plus the
input and output streams. The full-size simulation agrees: it ends at about
3.27 M cycles, of which 0.55 M are the weight transfer.

## Talking to the core

### Registers (AXI4-Lite, 32-bit)

| addr | name | bits |
|---|---|---|
| 0x00 | CTRL | 0 start (write 1; reads 1 until taken), 1 done (cleared by reading), 2 idle |
| 0x10 | MODE | 0 = weight transfer, 1 = feature-map computation |
| 0x18 | NITER | 7:0 iterations C of every ODEBlock, reset value 10 |

A start written while the core is busy is held back. It is issued as soon as
the core is idle, so the host can queue the next image.

### Weight transfer mode

Each parameter is sent as one 32-bit word, two's complement in the low 20
bits (convolution weights) or 24 bits (batch-norm values). The core routes
words to its five blocks in a fixed order:

- **The blocks, in turn:** ODEBlock1, Downsampling1, ODEBlock2,
  Downsampling2, ODEBlock3.
- **Inside an ODEBlock:** DW1, PW1, BN1, DW2, PW2, BN2.
- **Inside a downsampling block:** SC, CONV1, BN1, CONV2, BN2. With DSC,
  each CONV is its depthwise part, then its pointwise part.
- **Inside a unit:**
  - depthwise: `c*9 + ky*3 + kx`
  - pointwise: `o*CIN + i`
  - normal convolution: `((o*CIN + i)*3 + ky)*3 + kx`
  - batch norm: all scales, then all shifts

Batch norm is folded to `y = x*scale + shift`. The time channel is the last
input channel of every DW and PW layer, so it has its own kernel and its own
pointwise column.

Each unit counts the words it has taken and reports "full" when it has all
of them. The core passes each word to the first unit that is not full. When
every unit is full, the core returns one **acknowledge word** with TLAST
set: the number of words it took. At the default size that is 548,278:

- 544,000 convolution weights counted without the time channel;
- 950 weights for the time channel;
- 3,328 batch-norm values.

### Feature-map computation mode

- **Input.** The 8x8x64 map is sent as 4,096 words. Each word carries a
  24-bit value in its low bits. The order is channel group, then pixel
  (row-major), then lane: word `(g*64 + p)*8 + l` is channel `8g + l` of
  pixel `p`.
- **Output.** The core returns 256 words, the averaged channels 0..255
  sign-extended to 32 bits, with TLAST on the last word.
- **Between blocks.** Blocks pass maps over 8-lane valid/ready links, one
  pixel of one channel group per beat. The core handles one image at a
  time: the next start is taken once the last output word has left.

## Where this design departs from the published one

- **Input size.** The published text gives the core's input as 8x8x3, but
  also gives ODEBlock1's map as 8x8x64, and an ODEBlock keeps its size.
  This core takes 8x8x64. The 3-to-64-channel pre-processing convolution
  is left to the host, which the published design also runs in software.
- **Average pool.** ODEBlock3 produces 2x2x256, but the published core
  output is 1x1x256. A global average pool (`avg_pool`) closes this gap.
  It is an assumption.
- **Sequential units.** Inside a block the units run one after another, and
  the arithmetic is exactly 8 multipliers per convolution unit. The
  published design was produced by high-level synthesis with pipelining
  directives. Its clock is not stated, so its millisecond timings cannot be
  turned into cycles.
- **Rough speed comparison.** If each published block time is divided by
  this design's cycles for the same block, the implied clock is between
  about 46 MHz (Downsampling2) and 140 MHz (ODEBlock3), and about 90-110 MHz
  for the rest. So the two designs are of the same order, not equal.
- **Memory mapping.** The published design assigns each parameter array to
  BRAM or URAM by hand. Here every array is a plain synchronous memory, and
  the mapping is left to synthesis: about 11.9 Mbit of arrays in total.
- **Run-time C.** The number of iterations is a register (reset value 10)
  rather than a constant. `n_iter = 0` bypasses all three ODEBlocks.
- **Word formats.** The register map, the word orders, the acknowledge
  value, the binary point and the time value `t << 12` are all this
  design's choices.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops, and a watchdog ends it if the
design hangs. The references come from `tb/tb_ref_pkg.sv`, a plain-integer
model of the same arithmetic written without reference to the RTL. To run
one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dsodenet_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/dsode_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_dsodenet_top.sv -o sim && obj_dir/sim
```

Replace the top module and file name to run another testbench. The important
ones:

- **`tb_dsodenet_top`** runs the whole core at N = 8 on 8x8 (16 and 32
  channels in the later stages). Everything goes through the AXI ports:
  - a weight transfer with random gaps in the input stream, and its
    acknowledge word;
  - inferences with NITER = 2, 1 and 0 (bypass);
  - a start queued while the core is busy;
  - a reload of new weights;
  - random back-pressure on the output stream.

  Every output word is compared with the reference. The ODEBlock1
  iteration period is checked to the cycle. The test counts each mechanism
  and fails if one never happens.
- **`tb_dsodenet_full`** runs the core with all parameters at their
  defaults: 64x8x8 input, C = 10, 548,278 weight words, about 3.3 M cycles.
  It checks all 256 outputs, the acknowledge word and the exact iteration
  period (78,108 cycles). It takes about half a minute in Verilator.
  This is the size of the digit-recognition case (32x32 SVHN/MNIST images
  reduced to 8x8x64 by the host), the one case the published design runs on
  chip. The test uses random weights and maps, not trained ones.
- **`tb_ode_block`** and **`tb_downsampling_block`** test one block against
  the reference. The downsampling test runs both variants on one input.
- The unit testbenches check each unit's results and its exact cycle count.

Random weights are scaled by the fan-in, so the values stay mostly inside
the 24-bit range. The batch-norm test checks that saturation and ReLU both
happen. The core tests check that many outputs (about half) are neither
zero nor saturated, so the comparison is not trivial.

## Changing the design

- **Sizes.** `dsodenet_top` takes `N`, `H`, `W` and the reset value of
  `NITER`. `H` and `W` must be divisible by 4.
- **Formats.** `LANES`, the word widths and `FRAC` live in `dsode_pkg`.
  `LANES` is assumed to be 8 in the stream packing.
- **Adding a block.** A new block with weights needs one more entry in the
  top's weight-routing chain, in stream order.
