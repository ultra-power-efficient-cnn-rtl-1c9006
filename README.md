# A ring of 3x3-convolution engines: RTL for a CNN domain-specific accelerator

Most of the arithmetic in a VGG-style CNN is 3x3 convolution. This
accelerator does only that, as rectification and 2x2 max pooling applied to
3x3 convolutions, and does it on chip, with the whole model held in on-chip
SRAM. Other layer types (residual shortcuts, depthwise-separable layers,
fully-connected layers) are rewritten offline as sets of 3x3 layers (see
"Running other layer types" below). The hardware is:

* **16 identical CNN processing engines.** Each engine has a convolution
  array that does a 3x3 convolution at 14 x 14 pixel positions in one clock
  (14 x 14 x 9 = 1764 multipliers, 28224 in total), plus its own imagery
  buffer and its own coefficient buffer.
* **One controller** that drives all the engines in lock step.
* **A ring connecting the engines.** Each engine passes the image it holds to
  its neighbour. This lets every engine multiply every input channel by its
  own filters, and the input image is stored only once.
* **An input router**, which also holds the model's layer descriptors, **an
  output router** with a read-back FIFO, and **a host interface** that
  accepts a stream of 32-bit command words.

The published figures for the chip are:

* 28 nm process
* 66 MHz clock
* 224 x 224 RGB images at about 140 frames/s
* 9 MB of coefficient SRAM
* about 9.3 TOPS/W

Peak compute is 28224 MAC x 2 ops x 66 MHz = 3.7 TOPS. This RTL follows that
organisation with the published sizes as parameter defaults. Where the
description is silent, the choices made here are listed in the last section.

## Number format (DSFP)

Activations and coefficients use a small floating-point format
("domain-specific floating point").

| quantity    | bits | fields                                      | value (this RTL)       |
|-------------|------|---------------------------------------------|------------------------|
| activation  | 9    | `e[3:0]` (bits 8:5), `m[4:0]` (bits 4:0)    | m * 2^e, 0 .. 31*2^15  |
| coefficient | 15   | `s` (14), `e[1:0]` (13:12), `m[11:0]` (11:0) | (-1)^s * m * 2^e       |

The field widths are published. How the fields make a value is this
design's reading. Because the activation has no sign bit, every layer's
output is rectified: negative sums become 0.

* **Multiplier (`dsfp_mac`).** Multiplies the mantissas (5 x 12 bits) and
  shifts the product by the sum of the exponents. The product is exact.
* **Accumulation.** The nine products and all input channels are summed
  exactly, in a 48-bit accumulator.
* **Converting back (`int_to_act` in `cnn_dsa_pkg`).** The only rounding
  step. It does three things in order:
  1. Shifts the sum right by the layer's `out_shift`.
  2. Clamps negative values to 0 and saturates values above 31*2^15.
  3. Picks the smallest exponent at which the value fits in 5 mantissa bits,
     and truncates.

`out_shift` is how fractional weights are expressed. An identity kernel whose
centre holds 2^out_shift passes an activation through unchanged.

## One layer on the ring

This section is the part that needs the most care to follow.

**Where the data lives.** Each imagery-buffer word holds one channel as a
16 x 16 region: 14 x 14 pixels plus a one-pixel border. A layer has `nig`
imagery groups and `nfg` filter groups of 16 channels each:

* Input channel `i = g*16 + k` lives in engine `k`, word `in_base + g`.
* Output channel `f = fg*16 + k` is computed by engine `k` and written to its
  word `out_base + fg`.

**The loop.** For every filter group `fg` and imagery group `g`:

1. **IMG_RD.** All 16 engines read word `in_base + g`.
2. **LOAD.** The ring registers load those 16 regions, and each engine reads
   its first kernel.
3. **16 x STEP.** In step `s`, engine `k` holds the region that engine
   `(k - s) mod 16` loaded, which is input channel `g*16 + (k - s) mod 16`.
   The engine multiplies it by the kernel on its coefficient read port and
   accumulates at all 196 positions. The ring then rotates by one engine
   (`k-1 -> k`), and the next kernel is read.

After the last imagery group comes **WB**: every engine writes its
accumulators back as one region in one cycle. That write applies the shift,
optional 2x2 max pooling, conversion and rectification. It leaves the border,
and every pixel beyond the map's valid size, at zero. This zero border is the
next layer's padding, so a layer's output can be the next layer's input
directly. Layers alternate between two areas of the imagery buffer.

**Coefficient order.** Each engine reads its kernels in plain ascending
order. So the host must store engine `k`'s kernel for filter
`fg*16 + k`, input channel `g*16 + (k - s) mod 16` at coefficient word
`coef_base + (fg*nig + g)*16 + s`. This is the "cyclic order" that the
arrangement procedure of the original design calls for. The testbenches
place the coefficients using exactly this formula.

**Timing.** A layer takes `2 + nfg*(nig*(16+2) + 1)` clocks: two to fetch
its descriptor, two per imagery group to load the ring, 16 MAC steps per
group and one write-back per filter group. From the accepted start command
to `irq`, a run takes the sum over its layers plus one. Of those cycles, the
convolution array does useful work in 16 of every 18 inside a layer. Loading
the ring is not overlapped with the previous group's steps; that is a place
where throughput could be recovered.

**Map size.** A layer works on at most one 14 x 14 tile per channel
(`vsize` <= 14; pooling halves it). Larger maps would need spatial tiling
with halo exchange between tiles. The original description gives no such
mechanism, and none is built. So the 224 x 224 input layers of the published
benchmarks cannot run on this RTL as they are; the deep layers of those
networks (14 x 14 and 7 x 7 maps) can.

## Host protocol

The chip's USB/eMMC link is not part of the RTL. The top module exposes the
stream of command words such a link would deliver (`host_in_*`) and the
stream it sends back (`host_out_*`), both as valid/ready handshakes. A
command starts with a header word:

| bits  | field                                           |
|-------|-------------------------------------------------|
| 31:30 | op: 1 = write, 2 = read, 0 = no-op              |
| 29:28 | region: 0 = coefficient, 1 = image, 2 = descriptor, 3 = control |
| 27:24 | engine                                          |
| 23:8  | word                                            |
| 7:0   | lane: tap 0..8, pixel `r*16+c`, or descriptor half 0/1 |

How each command behaves:

* **Writes** take one more word, the data.
* **Reads** return one word on `host_out_data`, in order. Reads are held off
  (`host_in_ready` low) while the 16-word read-back FIFO is full.
* **Control word 0:** writing 1 starts the model; reading it returns
  `{busy, done}`.
* **Control words 1 and 2** read back the counts of completed layers and of
  conv steps.
* **While a model runs**, writes into the engine buffers are dropped and a
  second start is ignored.
* **`irq`** rises when the layer marked `last` has been written back.

The 64-bit layer descriptor (`layer_t`) holds these fields:

* `in_base`, `out_base`: image words
* `coef_base`: coefficient word
* `nig`, `nfg`: group counts
* `vsize`: valid input map side
* `pool`, `out_shift`
* `last`

A typical session:

1. Write the input pixels, including zeros on the border.
2. Write the coefficients in ring order.
3. Write the descriptors.
4. Write start.
5. Wait for `irq`.
6. Read the output pixels.

## Running other layer types

Everything the array computes is a 3x3 convolution, so other layer types are
handled by building special coefficient sets. No extra hardware is involved.

* **Residual shortcut** (two layers W1, W2 plus an add). It becomes three
  layers, where P1 is an identity kernel set (centre = 2^out_shift on the
  diagonal, zeros elsewhere) and P0 is all zeros:
  1. `[W1 | P1]`: N in, 2N out.
  2. `[[W2, P0], [P0, P1]]`: 2N in, 2N out.
  3. `[P1 ; P1]`: 2N in, N out.
* **Depthwise + pointwise.** Also two layers:
  1. A P x P layer with the depthwise kernels on the diagonal and zero
     kernels elsewhere.
  2. A Q x P layer whose kernels carry the 1x1 weight in the centre and zeros
     around it.
* **Fully-connected layer on a 7 x 7 map.** Three chained 3x3 layers. With
  zero padding, the centre pixel after three layers equals the valid
  convolution's single output.

## Files

The package and the modules, leaf to top:

| file | contents |
|------|----------|
| `rtl/cnn_dsa_pkg.sv` | sizes, DSFP types and conversions, descriptor and command formats |
| `rtl/dsfp_mac.sv` | one DSFP multiplier |
| `rtl/conv3x3_pe.sv` | one pixel position: 9 multipliers, adder, accumulator |
| `rtl/cnn_processing_block.sv` | 14 x 14 array of `conv3x3_pe`, shift, pooling, conversion |
| `rtl/image_buffer.sv` | imagery memory, one padded region per word, per-pixel write mask |
| `rtl/coef_buffer.sv` | coefficient memory, one 3x3 kernel per word (34952 words per engine = 9 MB total) |
| `rtl/cnn_engine.sv` | one engine: the three above, shared between host and controller |
| `rtl/clock_skew_ring.sv` | ring registers: parallel load, rotate by one |
| `rtl/ce_controller.sv` | layer sequencer |
| `rtl/input_router.sv` | host access routing, descriptor SRAM, start |
| `rtl/output_router.sv` | read-data selection and read-back FIFO |
| `rtl/host_interface.sv` | command-word decoder, `irq` |
| `rtl/cnn_dsa_top.sv` | the whole accelerator |

Each module has a self-checking testbench, `tb/tb_<module>.sv`. They print
`TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` holds the reference
arithmetic, written independently of the RTL.

* **`tb_cnn_dsa_top`** runs a random 3-layer model end to end at a reduced
  size (4 engines, 4 x 4 tiles). Its layers use several imagery groups,
  several filter groups, and pooling. The run also makes these happen:
  clamping, saturation, read back-pressure, output stalls, a write dropped
  while busy, and a start ignored while busy. It checks every output pixel
  and the exact cycle count.
* **`tb_cnn_dsa_full`** runs the same procedure with all parameters at their
  defaults: 16 engines, 14 x 14 tiles, 9 MB. It runs a 16-channel layer and a
  pooling layer.

* **`tb_cnn_dsa_workloads`** runs the three layer rewritings from "Running
  other layer types" at 4 engines and 8 x 8 tiles. Each result is compared
  with the original network computed directly:
  * a residual block with N = 4;
  * a depthwise layer with P = 4 followed by a pointwise layer with Q = 8;
  * a 7 x 7 fully-connected reduction.

To simulate one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/cnn_dsa_pkg.sv tb/tb_ref_pkg.sv tb/tb_cnn_dsa_top.sv --top-module tb_cnn_dsa_top
./obj_dir/Vtb_cnn_dsa_top
```

The full-size build takes about four minutes to compile and ten seconds to
run. The processing block is the bulk of the design: 16 x 196 accumulators of
48 bits, and 16 ring registers of 256 pixels.

## What follows the original design and what does not

Taken from the published description:

* 16 engines in a loop, where each engine receives imagery from one
  neighbour and sends its own to the other.
* Each engine made of a processing block, an imagery buffer and a
  coefficient buffer.
* Simultaneous 3x3 convolution at 14 x 14 positions from a 16 x 16 region,
  with rectification and 2x2 pooling.
* 16 x 42 x 42 MACs.
* The DSFP field widths.
* 9 MB of coefficient SRAM.
* The cyclic placement of imagery and coefficients.
* A controller, input and output routers with SRAMs, and a host interface
  that loads the weights and instructions, receives the image, signals
  completion and returns the result.

Choices made here, where the description is silent:

* **Numbers:** the value encoding of DSFP, truncation, saturation, and the
  per-layer output shift. There is no bias.
* **Memories:**
  * The imagery buffer organisation (one padded region per word, 64 words).
  * One coefficient word per 3x3 kernel. The original shows one SRAM per row
    of MACs.
  * What the routers' SRAMs hold: descriptors in the input router, a
    read-back FIFO in the output router.
* **Interfaces:** the descriptor format, the host command format, and the
  single command stream (the original system shows two USB ports).
* **Ring:** the rotation direction.
* **Timing:** the controller's schedule and cycle count.
* **Resets:** asynchronous reset of control state. Memories and datapath
  registers are not reset; they are written before they are read.

Not built:

* **The USB/eMMC physical link.**
* **The clock-skew circuit as a circuit.** Here the ring is ordinary
  registers on one clock.
* **Spatial tiling of maps larger than 14 x 14.** This means the 224 x 224
  benchmark networks cannot be run end to end. Their coefficient
  requirements are a second limit: VGG-16's 14.7 M convolution weights need
  26 MB at 15 bits, against the 9 MB here. The compressed models reported
  alongside it (2.8 to 5.5 MB) would fit only in a narrower weight format,
  which is not described.
