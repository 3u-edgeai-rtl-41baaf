# T-DLA: a ternary-weight convolution accelerator core

T-DLA is a small convolution engine for low-latency inference on edge FPGAs.
Its networks are trained with ternary weights: each weight is -1, 0 or +1
times a per-layer scale. A "multiplication" therefore only selects, negates
or drops an activation, and needs no DSP slice. The scarce DSP slices are
used only for the additions, in a SIMD mode that packs four 12-bit adders
into one slice. They run at twice the core clock, in their own clock domain.
A short instruction stream controls the core. Each 64-bit instruction runs
one convolution pass over a feature map in an on-chip buffer.

This repository holds synthesizable SystemVerilog for the core. Its default
parameters are the published configuration:

| parameter | meaning | default |
|---|---|---|
| `TN` | input channels per window (one pixel word) | 4 |
| `TM` | output channels computed in parallel | 16 |
| `LK` | largest kernel size | 5 |
| `LD` | longest line, i.e. widest feature map | 32 |
| `DW` | adder-tree lane width | 12 |
| `ACT_W` | activation width | 8 |

The published build used a Zedboard (Zynq-7020) at 125 MHz for the logic and
250 MHz for the adder trees. The parameters below are this design's own
choices: `ACC_W` = 24 (partial-sum width), buffer depths of 4096 words, 256
instructions, 16 weight tiles, and 16 credits.

## How a convolution flows through the core

```
 input buffer ──► line buffer ──► ternary array ──► async FIFO ══► adder trees ══► async FIFO ──► write-back
 (TN ch/word)    (k x k window    (TM x TN x LK²    (clk → clk_dsp)  (DSP SIMD,      (clk_dsp → clk)   accumulate → scale/ReLU
                  per clock)       select/negate)                     clk_dsp)                          → 2x2 max pool → output buffer
        ▲                                                                                                          │
        └──────────────── controller: fetch/decode, addresses, window tracking, credits ◄──── retire ──────────────┘
```

The controller reads one pixel word per clock from the input buffer, starting
at the instruction's source address. A pixel word holds `TN` channels of one
pixel, and the map is stored in raster order. Each word is pushed into the
line buffer. Once `k-1` rows and `k-1` columns have arrived, every push
completes one k x k window. The window goes to the ternary array, which
applies all `TM` output channels' weights at once. That gives
`TM x TN x LK²` = 1600 products of 12 bits, which cross into the adder-tree
clock domain together. There the trees reduce them to `TM` sums. The sums
cross back, and the write-back unit adds them to the partial sums stored in
the output buffer. On the pass marked "last", it scales and activates them
instead of storing them. It can also pool them. The result goes to the
output buffer. So a convolution runs at one output pixel per clock after a
fill time of about k-1 rows. The test program reads 1332 input pixels in
1416 core clocks over six passes.

The convolution has stride 1 and no padding. An FS x FS map with a k x k
kernel gives an (FS-k+1) x (FS-k+1) output. Output pixel (y, x) of channel m is

    sum over i, j < k and c < TN of  w[m][i][j][c] * in[y+i][x+j][c]

## The instruction word

Byte 7 is the most significant byte.

| byte | 7 | 6 | 5 | 4 | 3 | 2 | 1 | 0 |
|---|---|---|---|---|---|---|---|---|
| field | OP | FS | SAM | SAL | DAM | DAL | KS | CC |

FS is the feature-map size. SAM/SAL is the source address in the input buffer
and DAM/DAL the destination address in the output buffer (high and low bytes).
KS is the kernel size, and CC is a bitfield that selects the input/output
tiles, the activation and pooling. The field layout is the published one.
The published material does not give the opcode values or the meaning of the
individual CC bits. This design uses:

| OP | name | action |
|---|---|---|
| 0x00 | NOP | none |
| 0x01 | CONV | one convolution pass, fields as above |
| 0x02 | SETQ | scale multiplier = SAL, right shift = KS |
| 0xFF | END | stop; `done` goes high |

| CC bit | meaning |
|---|---|
| 3:0 | weight tile to use |
| 4 | first input-channel tile: start the partial sums at zero |
| 5 | last input-channel tile: produce the output instead of a partial sum |
| 6 | ReLU on |
| 7 | 2x2 max pooling on |

A CONV with KS = 0, KS > `LK`, FS < KS or FS > `LD` is skipped and raises `err`.
Instructions run strictly one after another. A CONV ends only when its last
result is in the output buffer.

## The variable-length line buffer

This is the part that makes kernel size and map width programmable without
wasted clocks. The buffer has `LK-1` line buffers in a chain. Each one is a
shift register up to `LD` entries long. The *Depth Reg* selects the output
tap, so a line delays its input by exactly d pushes. With d set to the map
width, the output of line r is the pixel r rows above the one entering now.
The *Kernel Reg* holds k. Lines beyond the first k-1 are held still, which
is the kernel control. The entering pixel and the output of each line each
feed one row of an `LK x LK` block of window registers, which shift one
column per push.

Register (r, c) therefore holds the pixel r rows up and c columns left of
the newest one. The output is reordered so that `win[i][j]` is the pixel at
row i, column j from the window's top-left corner, with zeros where i or j is
k or more. The ternary array can thus use the same weight positions for any
k. The controller knows which pushes complete a real window: those at row
`y >= k-1` and column `x >= k-1`. Other pushes straddle a row boundary and
are not issued. Both registers are loaded when a CONV starts. Pixels left in
the lines from an earlier map are never used, because a window is valid only
after k-1 full rows of the new map have entered.

## Ternary products and the SIMD adder trees

Weights are 2-bit two's complement: `01` = +1, `11` = -1, `00` = 0. The code
`10` is not ternary and is read as 0. Each of the 1600 units sign-extends
its 8-bit activation to 12 bits, then passes it, negates it or outputs zero.

A DSP slice in four-lane SIMD mode adds two 48-bit words as four independent
12-bit sums. Carries do not cross lanes, and each lane wraps modulo 2^12.
Four output channels share each slice, one per lane. For every group of four
channels, a binary tree of such slices reduces the `TN x LK²` = 100 products
of each channel to one sum. The tree is padded to 128 inputs, so it has 7
register levels and accepts a new window every clock. A sum wraps if it leaves
the 12-bit range. Keeping |sum| < 2048 is up to the quantization of the
network. For example, 8-bit activations limited to ±20 keep 100 ternary
products in range.

The trees run on `clk_dsp`. Two Gray-pointer asynchronous FIFOs connect them
to the core: one carries the products in and one carries the sums out.
Nothing in that path can stall. The controller therefore uses credits
instead: it reads a window-completing pixel only while it has a credit, and
gets the credit back when the write-back unit takes the sum. Each FIFO is
`CREDITS` deep, so neither can overflow. If the adder clock is too slow for
one window per core clock, the core stalls instead of losing data. The
`stall` output shows those clocks.

## Accumulation, scaling and pooling

A layer with more than `TN` input channels runs as several CONV passes over
the same destination. Each pass covers one tile of `TN` input channels and
uses its own weight tile and source map. The partial sums stay in the output
buffer as `TM` values of 24 bits per output pixel. The first pass writes
them, later passes read, add and write them back, and the last pass sends the
finished sums on through two single-clock stages:

* **scale and ReLU:** `y = (acc * mult) >>> shift` (rounding toward minus
  infinity). Negative values become 0 if ReLU is on. The result saturates to
  signed 8 bits. `mult` and `shift` come from the latest SETQ and stand for
  the per-layer scale factor of the ternary weights.
* **2x2 max pooling (stride 2):** a held value forms the horizontal pair
  maximum. On even rows the pair maximum goes into a row memory; on odd rows
  it is compared with the stored one. An odd last row or column is dropped.

Results go to the output buffer, one 8-bit value per channel, sign-extended
to 24 bits. Unpooled output (y, x) lands at `DA + y*OW + x`, where OW is the
output width. Pooled output lands at `DA + (y/2)*(OW/2) + x/2`. The output
buffer has one read and one write port. The partial-sum read goes out in
the clock the sum arrives. A destination address is visited once per pass,
so reads and writes never collide.

## Using the core

Ports of `tdla_top`:

* `imem_we/imem_addr/imem_wdata`: write 64-bit instructions (`tdla_pkg::make_inst` builds them).
* `ibuf_we/ibuf_addr/ibuf_wdata`: write pixel words, `TN` signed 8-bit channels each, maps in raster order.
* `wbuf_we/wbuf_tile/wbuf_m/wbuf_wdata`: write the weights of output channel `m` of a tile. The word holds
  `LK*LK*TN` 2-bit codes, element `[i*LK + j][c]` for kernel row i, column j and input channel c.
  Positions outside the kernel actually used are ignored.
* `start`: a one-clock pulse that runs from instruction 0. `busy`, `done` and `err` report the status.
* `obuf_raddr/obuf_rdata`: read results while `busy` is low. The data arrive one clock after the address.
* `clk`, `clk_dsp`, `rst_n`: `rst_n` is asynchronous, common to both clocks, and must be released
  synchronously to both.

A typical layer program is: SETQ, then CONV (first) and CONV (middle)
passes, then CONV (last, ReLU, pool), then END. The host moves results from
the output buffer to the input buffer for the next layer. It also loads new
weight tiles when a layer needs more than 16. In the published system an
embedded ARM processor plays this host.

Simulate with Verilator, for example for the whole core:

    verilator --binary --timing --assert -Irtl rtl/tdla_pkg.sv tb/tb_tdla_top.sv --top-module tb_tdla_top
    ./obj_dir/Vtb_tdla_top

Each testbench prints `TB_RESULT checks=N failures=M` and stops on its own
watchdog. `tb_tdla_top` runs the full default configuration end to end in
well under a minute. It runs a six-pass program twice: once with the adder
clock at twice the core clock, and once with it slower than the core clock,
which forces credit stalls. It compares every output word with an integer
model, and it fails if any mechanism is never exercised: credit stall,
multi-tile accumulation, ReLU, pooling, kernel sizes 1, 3 and 5, and an
illegal instruction.

`tb_tdla_lenet5` runs the two convolution layers of LeNet-5 as a workload.
Layer 1 takes a 32x32 image with a 5x5 kernel to 6 channels, with ReLU and
pooling. The host then moves the result to the input buffer as two channel
tiles. Layer 2 takes 6 to 16 channels in two accumulated passes. Both
layers are checked word for word. They take 1470 core clocks in total,
11.8 µs at 125 MHz. The published latency for the whole network, fully
connected layers included, is 16 µs.

## Files

| file | content |
|---|---|
| `rtl/tdla_pkg.sv` | instruction format, opcodes, CC bits, weight codes |
| `rtl/tdla_top.sv` | the core; also holds the weight buffer |
| `rtl/tdla_controller.sv` | fetch/decode, convolution sequencing, credits |
| `rtl/tdla_sdp_ram.sv` | BRAM model: input buffer, instruction memory, output buffer |
| `rtl/tdla_line_buffer.sv` | variable-length line buffer |
| `rtl/tdla_ternary_array.sv` | ternary computation array |
| `rtl/tdla_dsp_simd_add.sv` | one DSP slice in 4 x 12-bit SIMD mode |
| `rtl/tdla_adder_tree.sv` | adder trees |
| `rtl/tdla_async_fifo.sv` | dual-clock FIFO |
| `rtl/tdla_writeback.sv` | accumulation and output stage |
| `rtl/tdla_act_scale.sv` | scaling, ReLU and saturation |
| `rtl/tdla_max_pool.sv` | 2x2 max pooling |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_tdla_lenet5.sv` (workload) |

## How closely this follows the published design, and where it departs

The published material gives the block structure and these details: the
instruction fields, the line buffer's organisation, the ternary encoding and
the array size `TN x TM x LK²`, the 4 x 12-bit DSP SIMD adders in a faster
clock domain behind asynchronous FIFOs, and single-cycle activation, scaling
and pooling modules. The RTL follows all of these. Everything else is this
design's own choice:

* the opcode values, the CC bit assignment and the SETQ instruction;
* no Load instruction: the published format table labels its example row
  "Load", but what such an instruction moves is not described, so here the
  host writes the buffers directly;
* stride 1 with no padding, and no strided or depthwise convolution;
* the credit flow control, and instructions that never overlap;
* partial sums kept in the output buffer, and a 24-bit accumulator;
* the scaling formula (integer multiplier and shift) and the 2x2 pooling window;
* the buffer depths and the weight buffer of 16 tiles;
* a binary tree shape for the adders.

Known departures from the published results:

* **DSP count.** Each of the four trees here uses 127 slices (508 in total),
  while the published build used about 202 of the Zedboard's 220. The
  published reduction must share slices more cleverly, for example over
  time, using the doubled clock. That organisation is not described, so it
  is not reproduced.
* **Lane overflow.** Sums wrap at 12 bits, as the SIMD DSP mode does. The
  published material does not say how larger sums are handled.
* **Fully connected layers and 12-bit weights.** The published models keep
  their last fully connected layer at 12-bit weights. This core handles only
  ternary weights. A fully connected layer with ternary weights can run as
  1x1 convolutions on a 1x1 map, at one pixel per instruction.
* **Padding and large maps.** With padding absent and `LD` = 32, a 32x32 map
  with 'same' padding (34 or 36 wide once padded) does not fit. Neither do
  ImageNet-size maps unless the host cuts them into strips.

How the evaluated networks fit the default configuration (network shapes are
the standard ones, not taken from the published material):

* **LeNet-5 (MNIST):** the convolutions fit. Their inputs are 28 or 32 wide,
  within `LD` = 32, with 5x5 kernels, 1 and 6 input channels (1 and 2 tiles),
  and 6 and 16 output channels. They need 3 weight tiles and at most 1024
  pixel words. The 12-bit last layer does not fit.
* **Cifarnet (CIFAR-10):** the first 5x5 layer with 'same' padding needs a
  36-wide line, which does not fit. The second layer has 64 input channels
  (16 tiles) and 64 outputs (4 groups), so 64 weight tiles: four times the
  16 held on chip, so the host must reload them.
* **VGG-like (CIFAR-10):** the 3x3 'same' layers on 32x32 maps need 34-wide
  lines, which do not fit. Layers with 128 to 512 channels need hundreds to
  thousands of weight tiles, streamed by the host.
* **ResNet-18 (ImageNet):** 224-wide maps, a 7x7 first kernel above `LK` = 5,
  and stride-2 layers are all outside this core as built.
