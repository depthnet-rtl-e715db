# DepthNet accelerator: a depthwise-separable CNN engine for LiDAR depth completion

A LiDAR gives only a sparse depth image once its point cloud is projected onto
the camera plane. The DepthNet approach fills the image in two stages. First a
cheap distance transform spreads each measured depth to its empty neighbours
and gives a coarse dense map. Then a small encoder–decoder CNN predicts the
residual error of that coarse map. The CNN is built entirely from
*depthwise-separable* layers, and runs on this accelerator:

* 3x3 depthwise convolutions, stride 1 or 2;
* 1x1 pointwise convolutions;
* 3x3 stride-2 depthwise deconvolutions (transposed convolutions) for upsampling;
* bias, LeakyReLU (slope 0.2), residual shortcuts and skip concatenations.

The encoder halves the 1216x256 image three times: 1216x256x32, 608x128x32,
304x64x64, 152x32x128. The decoder doubles it back. The whole network has fewer
than 150K parameters.

The accelerator is one *process engine* with three compute units:

| unit | multipliers | what it computes |
|---|---|---|
| pointwise | 32x32 | one pixel, all 32 output channels, per cycle |
| depthwise | 32x9 | one window, 32 channels, per cycle |
| deconvolution | 32x9 | one 2x2 output block every 4 cycles |

On-chip memory around the engine:
* ten feature-map buffers, each one 152x32-pixel tile of 32 channels;
* one high-precision buffer for partial sums;
* weight, kernel and bias buffers;
* a DMA engine that talks AXI4 to DDR.

A host processor sequences the network. It sends the accelerator a list of
operation *descriptors* (load, compute, store). The RTL implements everything
on the programmable-logic side. The distance transform, the host program and
the DRAM are outside it.

## Data format

* A feature-map word is 512 bits: one pixel of a 32-channel group. Channel `c`
  is in bits `[16c+15:16c]`.
* Each value is 16-bit signed fixed point, Q7.8 (`FRAC = 8` fraction bits).
* Products are full width. Sums are 32-bit (`ACCW`), as are high-precision
  buffer entries.
* A result is written back as 16 bits. On that write:
  1. the bias is added in the 32-bit domain, `sum + (bias << 8)`;
  2. the sum is shifted right arithmetically by 8, which rounds toward minus
     infinity;
  3. it is saturated to 16 bits;
  4. LeakyReLU is applied if enabled.
* LeakyReLU computes `x < 0 ? (x*205) >>> 10 : x`, which is 0.2002·x.

All of this is in `rtl/depthnet_pkg.sv` and `rtl/post_proc.sv`. The
testbench model `tb/depthnet_ref_pkg.sv` repeats the same rounding, so results
are checked bit for bit.

## Feature-map buffers and tiling

The `fm_buffer` has 4864 words, one per pixel of a 152x32 tile, in raster
order. Its 512-bit width holds 32 channels. Ten of them are instantiated
(`N_FM = 10`). A map with 64 or 128 channels uses 2 or 4 buffers, one per
32-channel group. A network layer whose maps need fewer than ten buffers in
total can run without touching DDR.

The full-resolution layers (1216x256) are 64 times larger than a buffer. The
host runs them tile by tile:
1. load a tile with `OP_LOAD_FM`;
2. run the layer's operations on it;
3. store the result with `OP_STORE_FM`.

Each tile is padded with zeros at its own edges. Neighbouring tiles do not
exchange border pixels. Along tile seams the result therefore differs from an
untiled run (see *Departures*).

The **high-precision buffer** has the same 4864 entries but 32 bits per channel
(1024-bit words). It exists for pointwise convolutions with more than 32 input
channels:
1. The first 32-channel input group is multiplied by its 32x32 weight block.
   The 32-bit sums go to the HP buffer.
2. Each later group adds its products to the sum read back from the HP buffer.
3. The last group sends the sum on to bias, requantisation, activation and a
   normal feature-map buffer.

Two other network features reuse the same path:
* **Concatenation with a skip connection** is just more input groups of the
  following pointwise layer.
* **A residual shortcut** is one more pointwise pass with an identity weight
  matrix.

So neither feature needs a separate adder. The network's final
addition of the CNN residual to the coarse depth map is left to the host.

## The descriptor program

`depthnet_top` takes one `desc_t` (in `depthnet_pkg`) at a time on a
valid/ready port. `busy` stays high until the operation is complete, and
`ops_done` counts completed operations.

| `op` | source | destination | uses |
|---|---|---|---|
| `OP_LOAD_FM` | DDR `ddr_addr` | buffer `dst`, words `fm_off..` | `len` words |
| `OP_STORE_FM` | buffer `src`, words `fm_off..` | DDR `ddr_addr` | `len` words |
| `OP_LOAD_W` | DDR `ddr_addr` | weight buffer `wsel` from `waddr`/`baddr` | `len` words |
| `OP_DW` | buffer `src`, `h` x `w` | buffer `dst` | `stride2`, `waddr` (kernel set), `baddr`, `final_op`, `act_en` |
| `OP_PW` | buffer `src`, `h` x `w` | HP buffer, or buffer `dst` if `final_op` | `stride2`, `acc_in` (add HP), `waddr` (32x32 block) |
| `OP_DECONV` | buffer `src`, `h` x `w` | buffer `dst`, `2h` x `2w` | `waddr`, `baddr`, `final_op`, `act_en` |

Weight words are laid out in DDR as follows:

* **Pointwise.** One 32x32 block is 32 words. Word `o` holds the 32 input
  weights of output channel `o`. Word `i` of a load goes to bank `i mod 32`,
  address `waddr + i/32`.
* **Depthwise and deconvolution.** One kernel set is 9 words. Word `t` holds
  tap `t` (row-major 3x3, tap 0 top-left) of all 32 channels. Word `i` of a
  load goes to bank `i mod 9`, address `waddr + i/9`.
* **Bias.** One word holds 32 biases.

All banks of a buffer are read at one address, so a compute operation sees a
whole 32x32 matrix or 32x9 kernel set at once. The buffers hold 64 pointwise
blocks (65,536 weights), 32 kernel sets and 32 bias words: 75,776 values. That
is about half the network's parameters, so the parameters are reloaded part
way through a frame.

`tb/depthnet_top_tb.sv` is a complete example program.

## Scan order and window generation

The `layer_ctrl` controller reads the source buffer and feeds the process
engine one item per cycle.

**Pointwise passes** read only the pixels that produce an output. With
`stride2` these are every second row and column. The controller sends each
pixel's output address with it. With `acc_in` it also sends the address to the
HP read port, so the partial sum arrives together with the pixel.

**Depthwise and deconvolution passes** scan `(h+1) x (w+1)` positions in
raster order. The extra last row and column are zeros that the controller
injects. The `dispatcher`'s `window_gen` keeps the last two scan rows in line
buffers (`MAX_W = 1216` pixels deep) and a 3x3 register of the last three
columns. Once scan position `(y+1, x+1)` arrives, the 3x3 window centred on
map pixel `(y, x)` is complete:
* the extra row and column supply the bottom and right zero padding;
* masking the window's top row on map row 0, and its left column on map
  column 0, supplies the top and left padding.

Every map pixel thus gets exactly one window, about `w+2` cycles after it was
read. For stride 2 the engine keeps only windows centred on even rows and
columns.

The controller issues one scan item per cycle for convolutions. For
deconvolution it issues one every 4 cycles (see below). After the last item it
waits a fixed 24 cycles (`DRAIN`) for the pipelines to empty before it reports
the operation done.

## Deconvolution without multiplying zeros

A 3x3 stride-2 transposed convolution is normally computed by inserting zeros
between the input pixels and convolving. Three quarters of those products are
zero. `dw_deconv` computes only the useful ones. Take the 2x2 input patch

    IF11 IF12
    IF21 IF22

whose top-left pixel is the upper-left neighbour of input pixel `(y, x)`. In
this design's window that is taps 0, 1, 3 and 4, so `IF22` is the pixel
itself. Call the 3x3 kernel `K11..K33`. The four outputs at `(2y+a, 2x+b)`,
`a, b` in {0, 1}, of the upsampled map are:

    OF11 = IF11*K11 + IF12*K13 + IF21*K31 + IF22*K33
    OF12 = IF12*K12 + IF22*K32
    OF21 = IF21*K21 + IF22*K23
    OF22 = IF22*K22

That is nine products per patch, one per multiplier, formed in one cycle. The
four sums then leave one per cycle in the order OF11, OF12, OF21, OF22. This is
why the controller feeds a deconvolution one patch every 4 cycles. The output
address is `(2y+a)*(2w) + 2x + b`. The patch is taken from the window of
position `(y, x)`, whose top and left taps are the zero padding at the map
edge, so the 2w x 2h output covers the map exactly.

The kernel is applied as the equations are written, without flipping. A
framework whose transposed convolution uses the 180°-rotated kernel needs its
kernels rotated when they are exported.

## Compute units

* **`pw_conv`**: a 32x32 array of 16x16 multipliers. Each output has a 32-input
  adder tree (`adder_tree`), and its accumulator adds `acc_init` (the HP
  partial sum, or 0). The latency is 3 cycles: products, tree, accumulator.
* **`dw_conv`**: 32 channels x 9 taps of multipliers and a 9-input tree per
  channel. The latency is 2 cycles.
* **`dw_deconv`**: described above. It accepts a patch every 4 cycles, and the
  first output leaves 2 cycles after the patch.
* **`post_proc` and `leaky_relu`**: add the bias, requantise, saturate and apply
  the activation.
* **`process_engine`**: ties these together. It computes the destination
  addresses, and for non-final pointwise passes it routes the result to the
  HP buffer.

Only one operation runs at a time, so only one unit is busy in any cycle.

## DMA (`axi_dma`)

`axi_dma` is an AXI4 master with a 32-bit address and 512-bit data.
* It issues INCR bursts of at most 16 beats.
* It splits a burst where it would cross a 4 KB page.
* It keeps one burst outstanding at a time.
* Reads accept a beat per cycle. Writes send a beat every 2 cycles, because
  the buffer read is registered.
* `ddr_addr` must be 64-byte aligned.
* A non-OKAY response sets the sticky `dma_err`.
* Assertions check that AR/AW and W stay stable while they are stalled.

## Departures from the published design

* **Tile borders.** The published design partitions feature maps and processes
  them in sequence, but does not say how neighbouring tiles exchange borders.
  Here each tile is zero padded at its own edges, so results near tile seams
  differ from an untiled network.
* **Word widths.** Data widths are not published. The 16-bit Q7.8 data, 32-bit
  sums and 512-bit buffer words are this design's choices.
* **Bias and activation.** They are applied only on the final write of an
  output group. Partial sums are kept at 32 bits.
* **Buffers and weight loading.** The sizes of the weight, kernel and bias
  buffers, their bank organisation and the weight layout in DDR are this
  design's own. Only "half of the parameters on chip" is given.
* **Concatenation and shortcuts.** These are done as extra pointwise passes
  through the high-precision buffer. No separate adder or concatenation unit
  is built. The final residual addition to the coarse depth map is done by the
  host.
* **Control.** The descriptor interface and the fixed drain wait are
  assumptions. The published design runs a predefined routine from the ARM
  host over a register interface that is not described.
* **Kernel orientation.** Deconvolution kernels are used as in the equations
  above. Any framework-specific rotation is the host's job.
* **Concurrency.** The three compute units never run at the same time.
* **Not built.** The host processor, the distance transform, the point-cloud
  projection, the Ethernet link and the DDR controller.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The packages must come first. For example,
with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/depthnet_pkg.sv tb/depthnet_ref_pkg.sv tb/depthnet_top_tb.sv \
        --top-module depthnet_top_tb -Mdir obj_top -o sim
    ./obj_top/sim

Substitute `process_engine_tb`, `dw_deconv_tb`, `axi_dma_tb`, and so on for
the block tests. `depthnet_ref_pkg.sv` is only needed by the testbenches that
import it, but listing it always is harmless.

`depthnet_top_tb` runs the top at its default sizes. It takes one full
152x32x32 tile through:
1. load from DDR;
2. depthwise convolution stride 1 + LeakyReLU, then depthwise stride 2;
3. a two-pass pointwise convolution through the HP buffer;
4. deconvolution;
5. store to DDR.

It checks about 195,000 output values against the reference. It also checks
the rates: one depthwise window per cycle and one deconvolution patch per 4
cycles. It counts stride-2 windows, HP writes and reads, deconvolution
outputs, negative activations, padding items, 4 KB burst splits and AXI
stalls, and fails if any of them never happened. Building takes about a
minute, and the simulation under a second.

`depthnet_dblock_tb` runs one decoder block of the network (the last one:
upsample 32 channels, concatenate with a 32-channel encoder output, convolve
to 32 channels) on one 152x32 output tile, at default sizes. As a descriptor
program it is:
1. load the input, the skip and the parameters;
2. deconvolution, then pointwise with LeakyReLU (the upsample);
3. a depthwise convolution on each 32-channel half;
4. a 64-input pointwise layer as two passes through the HP buffer;
5. store.

It checks both the upsampled map and the block output, 311,000 values. It
reports about 52,000 cycles per tile from first load to last store. About
30,000 of these are the six compute passes, at one scan item per cycle (four
per deconvolution patch). The rest is DMA, at the memory model's random
stall rate.

`depthnet_eblock_tb` does the same for an encoder block with stride 2 (32 to
32 channels, 152x32 in, 76x16 out). Its two residual additions are made as
follows:
* the 1x1 stride-2 shortcut convolution writes its sums to the HP buffer,
  and the main path's pointwise pass adds them;
* the second addition copies its input map into the HP buffer with an
  identity pointwise pass.

All ten feature-map buffers are in use. The test takes about 27,500 cycles
per tile.

`tb/axi_mem_model.sv` is the behavioural DDR used by the DMA and top tests. It
adds random ready/valid stalls and flags any 4 KB crossing or burst longer
than 16 beats.
