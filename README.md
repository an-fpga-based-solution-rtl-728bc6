# A four-by-four convolution engine for one CNN layer

This IP core computes one convolutional layer of a CNN on an FPGA. It is
meant for small edge devices. The input is an image (a feature map) of `C`
channels, `H` rows and `W` columns, plus `K` kernels of 3x3x`C`. The output
is a feature map of `K` channels and `(H-2) x (W-2)` pixels: stride 1, no
padding, each output pixel being its kernel's bias plus

    F[k][y][x] = sum over c, m, n of  I[c][y+m][x+n] * W[k][c][m][n]

The core splits this work four ways, twice. The input channels are split
into quarters, and four **computing cores** each work on one quarter. The
kernels are split into quarters too: inside a computing core, four **PCOREs**
each take one kernel quarter. In every tile period of 8 clock cycles, each
computing core takes one 3x3 image tile and makes four partial sums
(**psums**), one per PCORE. So the IP makes 16 psums per 8 cycles. This is
why `C` and `K` must be multiples of four.

The RTL follows a published design for this architecture. Its structure,
quartering, data layout, bias trick, 8-bit widths and 8-cycle rate come from
that publication. The register map, the bus address map and the cycle-level
schedule were not published, and are this implementation's own. The sections
below mark which is which.

## The data path of one tile period

Take one step of the computation: kernel index `k` in `0..K/4-1`, channel
index `c'` in `0..C/4-1`, and output position `(y, x)`. In this step all 16
PCOREs work at once:

* Computing core `i` reads the 3x3 tile at `(y, x)` of channel `i*C/4 + c'`
  from its own image BRAM.
* PCORE `j` of core `i` holds channel `i*C/4 + c'` of kernel `j*K/4 + k`. It
  outputs the dot product of that kernel channel and the tile.
* An adder tree for each `j` adds the four cores' psums for kernel
  `j*K/4 + k`: two adders take the pairs, and a third adds the two results.
  The sum is the contribution of four channels to output pixel `(y, x)` of
  that kernel.
* Accumulator `j` reads that output word from output BRAM `j`, adds the sum,
  and writes the word back.

The loop order is `k` outermost, then `c'`, then output rows, then columns.
An output word therefore receives `C/4` additions, one per pass over the
image. The word starts at the bias, so it ends at bias plus the full sum.
There is no bias adder. The host writes each output channel's bias into
every word of that channel before the run.

### Weight stationary, image streaming

A PCORE keeps its kernel channel for a whole pass over the image, which is
`(H-2)*(W-2)` tiles. Only the image tile changes from one period to the next.
The weight loader fetches new weights in the first period of a new
`(k, c')` pair. It fetches into shadow registers, so the last tile of the old
pair is still computed with the old weights in that period. A weight reload
therefore costs no cycles.

### Two pipelined stages

Each tile passes through two stages, each one tile period long. The load
stage moves the data from the BRAMs into the loaders. The compute stage
computes and accumulates. While tile `n` is computed, tile `n+1` is loaded.
A layer is busy for `(K/4)*(C/4)*(H-2)*(W-2) + 1` tile periods plus one setup
cycle. The extra period drains the pipeline.

The 8-cycle period is the published rate. How the cycles are used inside the
period is this implementation's choice. The controller broadcasts a phase
counter `0..7`, and every block acts on fixed phases:

| phase | load stage (tile n+1)                           | compute stage (tile n)                          |
|-------|--------------------------------------------------|-------------------------------------------------|
| 0-4   | both ports of every image/weight BRAM read two of the nine taps per cycle | 0-2: each PCORE's three MACs (one per kernel row) add one product each |
| 3     |                                                  | PCORE adders: psum = sum of the three row MACs  |
| 4     |                                                  | adder trees register the cross-core sums; accumulators read the output word |
| 5     | last taps captured                               | accumulators write word + sum                   |
| 6-7   | idle                                             | idle                                            |
| 7     | shadow tile (and weights) move to the PCOREs     |                                                 |

The schedule needs 6 cycles (`MIN_TILE_CYCLES`). `TILE_CYC` can be lowered to
6 to make the core a third faster. The default keeps the published 8.

### Arithmetic

Pixels and weights are 8 bits. The published waveform shows the psums as
8-bit signals. Its values are the low 8 bits of the full dot products. For
the first tile, `01 02 03 / 06 07 08 / 0b 0c 0d` with kernel `01..09`, the
sum is 411 = 0x19b, and the waveform shows `9b`. The RTL therefore makes
psums, adder-tree sums and output words `PSUM_W` = 8 bits wide, with
wrap-around arithmetic. A wrapped sum has the same low bits however it is
split, so the result is the exact sum modulo 256. Whether the data is
signed or unsigned makes no difference at this width. The MACs and PCORE
adders keep full precision internally. With a wider `PSUM_W`, the operands
are treated as unsigned.

## Memory organisation

There are 24 true dual-port BRAMs (`bram_tdp`, one-cycle read latency).

| group  | count | BRAM n holds                                   | word address                        | default depth |
|--------|-------|------------------------------------------------|-------------------------------------|---------------|
| image  | 4     | channels `n*C/4 .. (n+1)*C/4-1`                 | `c'*H*W + y*W + x`                  | 100352 (224*224*8/4) |
| weight | 16    | n = 4i+j: kernels `j*K/4 + k`, channels `i*C/4 + c'` | `(k*C/4 + c')*9 + 3*row + col` | 36 (8*8*9/16) |
| output | 4     | output channels `n*K/4 .. (n+1)*K/4-1`          | `k'*(H-2)*(W-2) + y*(W-2) + x`      | 98568 (222*222*8/4) |

The output layout is the same as the image layout, so one layer's result
has the form of the next layer's input. The default depths fit the largest
layer evaluated in the publication: a 224x224x8 image with eight 3x3x8
kernels. A layer fits when `C*H*W/4`, `K*C*9/16` and `K*(H-2)*(W-2)/4` are
within the three depths. The controller does not check this.

Port ownership:

* Image and weight BRAMs: port A belongs to the bus while the IP is idle and
  to the loaders while it is busy (`core_own`). Port B always belongs to the
  loaders. A loader can therefore read two words per cycle, and nine taps
  take five cycles.
* Output BRAMs: port A always belongs to the bus. Port B belongs to the
  accumulator.

## Using the core

The core has two bus ports. The processing system drives `ctl_*`. A DMA
engine drives `dma_*`. Neither of those two masters is part of this RTL.

**`dma_*`**: AXI4 slave, 32-bit data, 4-bit IDs. Each beat carries one BRAM
word in its low bits. A byte address is `{region[4:0], word[16:0], 2'b00}`:

* regions 0-3 are the image BRAMs;
* regions 4-19 are the weight BRAMs, numbered `4 + 4*core + pcore`;
* regions 20-23 are the output BRAMs.

The port handles INCR and FIXED bursts, and treats WRAP as INCR. It ignores
write strobes and AxSIZE, and serves one transaction at a time. Writes run at
one beat per cycle and reads at one beat every two cycles. While the core is
busy, no new address is accepted.

**`ctl_*`**: AXI4-Lite slave.

| offset | register | access | meaning |
|--------|----------|--------|---------|
| 0x00 | CTRL   | W   | bit 0: start (ignored while busy) |
| 0x04 | STATUS | R   | bit 0 busy, bit 1 done, bit 2 error (C or K not a positive multiple of 4, or H or W below 3) |
| 0x08 | H      | R/W | image height (frozen while busy) |
| 0x0C | W      | R/W | image width |
| 0x10 | C      | R/W | input channels |
| 0x14 | K      | R/W | kernels |
| 0x18 | CYCLES | R   | busy cycles of the last run |

To run a layer:

1. Write the image, the weights, and the biases (one value repeated over
   each output channel's words) through `dma_*`.
2. Write H, W, C and K, then write CTRL = 1.
3. Wait for `done`, or poll STATUS.
4. Read the output BRAMs through `dma_*`.

The `busy` and `done` outputs mirror STATUS.

At the published workload, 3,154,176 psums take 1,577,097 busy cycles. The
publication's figure is 1,577,088, which leaves out the setup cycle and the
drain period. At 112 MHz this is 14.08 ms, or 0.224 G psums per second.

## Files

| file | block |
|------|-------|
| `rtl/conv_pkg.sv` | widths, sizes, phases, register and region numbers, the `tile_t` type |
| `rtl/conv_ip.sv` | top level |
| `rtl/conv_controller.sv` | AXI4-Lite registers and tile sequencer |
| `rtl/axi_bram_port.sv` | AXI4 slave for the DMA side |
| `rtl/image_bram_bank.sv`, `rtl/weight_bram_bank.sv`, `rtl/output_bram_bank.sv` | the three BRAM groups |
| `rtl/bram_tdp.sv` | dual-port RAM |
| `rtl/computing_core.sv` | one multi-kernel computing core |
| `rtl/img_loader.sv`, `rtl/weight_loader.sv` | the loaders |
| `rtl/pcore.sv`, `rtl/mac.sv` | PCORE and its MAC unit |
| `rtl/psum_adder_tree.sv`, `rtl/accumulator.sv` | cross-core sum and read-modify-write |

Each block `X` has a self-checking testbench `tb/tb_X.sv`. Each testbench
prints `TB_RESULT checks=N failures=M`. `tb/tb_conv_ip.sv` runs the whole
core at its default sizes, in four parts:

* the 5x5 example of the published waveform;
* a random 7x6x8 layer with 8 kernels;
* a layer with invalid dimensions;
* the full 224x224x8 layer with eight 3x3x8 kernels.

It compares every output word with a reference loop nest and checks the
cycle count. It also counts how often each mechanism happens: weight
reloads, load/compute overlap, several channel steps and kernel passes, the
bus held off during a run, and the error exit. `tb/tb_computing_core.sv`
checks one core against every psum value printed in the published waveform
(`psum_0`: 9b c8 f5 7c a9 d6 5d 8a b7, and so on).

To simulate with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
        rtl/conv_pkg.sv tb/tb_conv_ip.sv --top-module tb_conv_ip
    ./obj_dir/Vtb_conv_ip

`-Wno-fatal` keeps lint warnings (mostly width conversions in the
testbenches) from stopping the build. The full end-to-end run takes a few
seconds of simulation after about 20 seconds of compiling. The per-block testbenches override depths to keep
their memories small. Change sizes through the parameters of `conv_ip`
(`IMG_D`, `W_D`, `OUT_D`, `TILE_CYC`). Change widths and the number of
quarters in `conv_pkg`.

## Departures and limits

* **Widths.** The 8-bit psum and output width copies the published
  waveform, so output words wrap modulo 256. A wider `PSUM_W` (up to 32) is
  a one-line change in `conv_pkg`, and the output BRAMs and bus follow.
* **Kernel size and stride.** Only 3x3 kernels with stride 1 and no padding
  are supported. The published psum count implies stride 1 and no padding.
  Other kernel sizes are not described.
* **Layers not divisible by four.** The first layer of a typical CNN has
  3 channels and is rejected with the error bit. The publication notes that
  this layer does not fit the scheme, but does not say how it is handled.
* **Chaining layers.** The published text says the output BRAMs can feed the
  next layer directly. How the roles of the banks would be switched is not
  described, so it is not built: the result has to be moved back into the
  image BRAMs over the bus.
* **Memory size on small devices.** At the default depths the 24 banks hold
  796,256 bytes (about 6.4 Mbit). That is more block RAM than a Zynq-7020
  has (140 blocks of 36 Kbit), so the full 224x224x8 layer fits on a
  Zynq UltraScale+ ZU3EG but not on a Zynq-7020. The published resource
  figures list only LUTs and flip-flops. On the smaller device, lower
  `IMG_D` and `OUT_D`; a 160x160x8 layer, for example, needs about 104
  blocks.
* **Several IP instances.** The published 4.48 GOPS figure assumes 20
  instances on one device. This RTL is one instance.
* **Internal schedule.** The phase schedule, the shadow registers for weight
  reloads, the use of both BRAM ports by the loaders, and the bus and
  register maps are this implementation's own design. They are not the
  published one.
