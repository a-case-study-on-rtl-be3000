# A streaming int8 U-Net for crack segmentation

This is synthesizable SystemVerilog for a small U-Net that labels every pixel of
a 256 x 256 RGB image as *crack* or *background*. It is built as a dataflow
machine. Every layer of the network is its own piece of hardware with its own
weights. The layers are chained by valid/ready pixel streams, so the whole
network works on one image at the same time: while the decoder produces the
first result rows, the encoder is still reading the lower part of the image.
Nothing goes to external
memory except the input image and the result. In an optional mode, the
skip-connection feature maps also go out and come back.

The network is the U-Net with a channel-scaling factor `C`:

- There are four down-sampling levels plus a bottleneck. Level `l` works on
  `(256>>l) x (256>>l)` pixels with `C<<l` channels.
- Each level has two 3x3 convolutions (padding 1, no bias). Each convolution is
  followed by batch norm and ReLU.
- Each encoder level ends in a 2x2 max pooling.
- Each decoder level has a learnable 2x2 stride-2 transposed convolution. Its
  output is concatenated with the skip feature map of the same level. Then come
  two more 3x3 convolutions.
- A final 1x1 convolution produces two class scores per pixel.

`C = 4` is the default. It is the configuration behind the best energy
efficiency reported for this design: about 400 frames/s at about 20 W on a
Zynq UltraScale+ ZU19EG. Weights and activations are int8. All weights live on
chip.

## Dataflow at a glance

```
 AXI4 read                                                       AXI4 write
    |                                                                 ^
 input_dma -> double_conv L0 -> fork --------- skip L0 ------------.  |
                                  |                                 | output_dma
                               maxpool -> double_conv L1 -> fork -- skip L1 ...
                                                        ...          |  ^
                          bottleneck double_conv (L4, 64 ch)          | bn (no ReLU)
                                   |                                  |  ^
               tconv2x2 -> bn -> concat(skip L3, up) -> double_conv   | conv1x1
                     ... (levels 3, 2, 1, 0) ...  -------------------'
```

`double_conv` is conv2d → bn_relu → conv2d → bn_relu. Every arrow is a
valid/ready stream that carries one pixel per beat with all its channels side
by side. Channel `c` sits in bits `[8c +: 8]` for activations, or
`[32c +: 32]` for the raw accumulator streams between a convolution and its
`bn_relu`.

| Module | Role |
|---|---|
| `unet_pkg` | Widths, the configuration-bus struct, layer numbering, the requantiser function |
| `input_dma` | Reads the image (one pixel per 32-bit word, R/G/B in bytes 0..2) as AXI4 INCR bursts, with up to 4 bursts in flight |
| `sliding_window` | Row buffers that turn a raster stream into 3x3 windows, zero-padded at the borders |
| `conv2d` | 3x3 convolution, `PE` output channels per cycle, weights in a local array |
| `bn_relu` | Folded batch norm (`(acc*mult + offset) >>> shift`), optional ReLU, saturation to int8 |
| `maxpool2x2` | 2x2/2 max pooling with a half-row buffer |
| `stream_fork` | Copies a stream to the pooling path and the skip path |
| `stream_fifo` | FIFO; one instance per level holds the on-chip skip map |
| `skip_offchip` | Skip map written to external memory and read back over its own AXI4 port |
| `tconv2x2` | 2x2 stride-2 transposed convolution |
| `concat` | Joins the skip stream (low channels) and the upsampled stream (high channels) |
| `conv1x1` | Per-pixel classifier: `C` features → 2 scores |
| `output_dma` | Writes one 32-bit word per pixel, `{16'b0, score1, score0}`, as AXI4 bursts |
| `double_conv` | Helper: one U-Net stage (two conv + bn_relu pairs) |
| `unet_top` | Wires all of the above for any `C`, `H`, `W` |

## Streaming convolution: where the difficulty is

**Windows.** `sliding_window` writes input row `r` into slot `r mod 4` of a ring
of four row buffers. The window centred on `(orow, ocol)` can be shown once the
last pixel it needs has arrived. That pixel is `(min(orow+1, H-1), min(ocol+1, W-1))`.
Input is held off when the next row would overwrite row `orow-1`, which the
current window still uses.

This gives a one-row look-ahead buffer. The fourth slot lets the next row fill
while the last pixel of a row is still being consumed. Positions outside the
image read as zero, so padding costs no cycles. After the last window of a frame
the counters return to zero, and the next frame can follow straight away.

**Compute.** `conv2d` holds one window for `COUT/PE` cycles. In each cycle it
computes `PE` dot products of length `9*CIN` (int8 × int8, summed in 32 bits).
The results collect in a partial-result register. The full `COUT`-channel
accumulator pixel is then issued in one beat.

With `PE = 1`, the full-resolution layers need `C` cycles per pixel, so one
frame takes `65536*C` cycles. Lower levels have 4× fewer pixels and 2× more
channels, so they are never the bottleneck. The decoder's first convolution at
level 0 sees `2C` input channels, but it still produces `C` output channels and
so needs only `C` cycles per pixel.

**Transposed convolution.** Each input pixel of `tconv2x2` makes a 2x2 patch of
output pixels. Those four pixels fall on two different output rows, so the
block buffers one input row. It then emits output row `2i` (kernel row `a = 0`)
and output row `2i+1` (`a = 1`) from the same buffered row. Within each output
row, every input column gives two pixels (`b = 0, 1`). Two row buffers
alternate, so the next row can arrive while the current one is expanded.

**Why the skip buffers hold whole maps.** The decoder at level `l` cannot take
its first skip pixel until the deeper levels have produced their first upsampled
row. That row depends on the bottleneck, which needs data from far down the
image. Until then, the encoder at level `l` keeps producing skip pixels. If the
skip FIFO were too small, the encoder would stall, the deeper levels would
starve and the pipeline would deadlock.

The on-chip mode therefore gives each skip FIFO the whole map of its level:
`(256>>l)^2` pixels of `C<<l` bytes, 3.9 Mbit in total at `C = 4`. In the 32 x 32,
`C = 2` end-to-end simulation every skip FIFO does fill up to its whole map
(1024/256/64/16 pixels): the decoder's first upsampled row needs the
bottleneck, and the bottleneck needs most of the image. At 256 x 256 the
ratio of look-ahead rows to image rows is smaller, so part of that memory
may be saved there; this design keeps the safe size.

## Off-chip skip connections (`SKIP_OFFCHIP = 1`)

Each level gets its own AXI4 master port, `sk_*[l]`, with a data width of one
pixel: `(C<<l)*8` bits. `skip_offchip` collects `BURST` pixels in a small input
FIFO and writes them as one INCR burst to `skip_base[l] + n*BURST*bytes`.

After the write response has arrived, it reads the same burst back into an
output FIFO. It does this only when that FIFO has room for the whole burst, so
read data is never refused. There is one burst outstanding per direction.

The result is that the full map lives in external memory, and only
`2*BURST` pixels of buffering stay on chip in each direction. Pixels come back
in order, so the decoder cannot tell the two modes apart. External memory only
has to keep up with the pixel rate of each level.

## Numbers and requantisation

Convolutions produce 32-bit accumulators. `bn_relu` turns them back into int8,
channel by channel:

```
y = sat8( relu?( (acc * mult[c] + offset[c]) >>> shift ) )
```

- `mult[c]` is int16 and `offset[c]` is int32; both are per channel.
- `shift` is 0..63, one per layer.
- `>>>` is an arithmetic shift, so rounding is toward minus infinity.

A batch norm with scale `s` and shift `t` after a convolution whose inputs and
weights have scales `sa` and `sw` folds to `mult/2^shift ≈ s*sa*sw/sy` and
`offset/2^shift ≈ t/sy`. Here `sy` is the scale of the output activations.

The same block with `RELU = 0` requantises the transposed convolutions and the
final 1x1 convolution. The output scores are therefore int8 logits; take the
arg-max on the host. After reset every layer is `mult = 1`, `offset = 0`,
`shift = 0`.

## Loading a network: the configuration bus

`cfg` is a `cfg_wr_t` struct with the fields `we`, `layer[5:0]`, `addr[23:0]`
and `wdata[31:0]`. Every weighted block compares `cfg.layer` with its own
`LAYER_ID`.

Layer numbers:

| Layers | Numbers |
|---|---|
| Encoder level `l` (0..3) and bottleneck (`l = 4`) | `2l`, `2l+1` |
| Decoder level `l` (3..0): transposed convolution | `10 + 3*(3-l)` |
| Decoder level `l`: its two 3x3 convolutions | `10 + 3*(3-l) + 1`, `+ 2` |
| Final 1x1 convolution | 22 |

These are computed by `enc_layer_id` and `dec_layer_id` in `unet_pkg`.

When `addr[23] = 0`, the write is one weight. It is sign-extended from
`wdata[7:0]` and stored at this address:

| Block | Address |
|---|---|
| conv2d | `co*9*CIN + (ky*3 + kx)*CIN + ci` |
| tconv2x2 | `((a*2 + b)*COUT + co)*CIN + ci`; output pixel `(2i+a, 2j+b)` |
| conv1x1 | `cls*CIN + ci` |

When `addr[23] = 1`, the write sets the requantisation of that layer's
`bn_relu`, relative to `base = 1<<23`:

| Address | Field |
|---|---|
| `base + c` | `mult[c]` |
| `base + COUT + c` | `offset[c]` |
| `base + 2*COUT` | `shift` |

A configuration word is one weight, so loading the 121,300 weights of `C = 4`
takes that many writes. Load once before the first frame.

## Running a frame

1. Put the image at `src_base`. It is 65536 32-bit words, one pixel each, in
   raster order.
2. Pulse `start`.
3. `busy` stays high until the last result word has been written to `dst_base`
   and acknowledged. `done` pulses once at that point.

The next frame may be started as soon as `busy` has fallen. Each block also
accepts a following frame directly behind the previous one, so a controller
that overlapped frames would only have to change the DMA start logic.

## Timing

| Quantity | Cycles |
|---|---|
| Steady-state frame interval | `H*W*C/PE` = 262,144 at the defaults |
| One isolated frame, start to `done` (includes filling the pipeline and random memory wait states) | 375,899, measured |

At `PE = 1`, about 400 frames/s needs a clock near 105 MHz for the steady-state
interval and near 150 MHz for the isolated-frame figure. `PE` must divide `C`.
Raising it divides the interval, and it multiplies the multipliers per
convolution layer.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=M` and has a watchdog. The testbenches use
randomised valid/ready stalls. Valid is held stable while stalled, as the
stream rules require. Expected values are computed independently inside the
testbench.

- `tb_unet_top` runs two complete accelerators at `C = 2` on a 32 x 32 image for
  two frames each, one with on-chip and one with off-chip skips. It checks every
  class score against `unet_ref_pkg`, a bit-exact software model of the same
  network and requantisation. It also checks the frame time against
  `2*H*W*C/PE + 64*W*C`. It counts output back-pressure, input back-pressure,
  convolution input stalls, skip FIFO fill, off-chip skip bursts and `done`
  pulses, and it fails if any of these never happens.
- `tb_unet_full` runs `unet_top` with all defaults (`C = 4`, 256 x 256, on-chip
  skips). It sends one real-size frame and compares all 131,072 scores. The
  simulation takes a few minutes.
- `tb_unet_workloads` runs the larger `C = 8` network (32 x 32) twice: with
  on-chip skips and `PE = 2`, and with off-chip skips and `PE = 1`. Every score
  is checked. The measured frame times, 11,456 and 22,809 cycles, show the
  `C/PE` scaling.
- `axi_mem_model` is a behavioural AXI4 memory with random wait states. It is
  used by the DMA, off-chip skip and end-to-end tests.

To simulate a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/unet_pkg.sv tb/unet_ref_pkg.sv \
  tb/tb_unet_top.sv -y rtl -y tb +libext+.sv --top-module tb_unet_top
./obj_dir/Vtb_unet_top
```

## Departures and open points

- **The layer library.** The original accelerator was generated from a C++
  layer library. Its internal parallelism, buffer sizes and clock are not
  published. Everything below the level of "one module per layer, joined by
  streams, weights on chip, optional off-chip skips through one AXI port per
  skip" is this design's own choice. That includes the window generator, the
  `PE` scheme, the FIFO sizes, the pixel packing in memory and the
  configuration bus.
- **Quantisation.** The quantisation scheme (per-channel multiplier, offset and
  shift) is an assumption. The original used int8 post-training quantisation
  without publishing the arithmetic, so scores will match a given trained
  network only if its constants are derived in this form.
- **Input layout.** Three input channels (RGB) are assumed. Input pixels are
  assumed to be already int8. Normalisation is left to the host.
- **Upsampling.** Transposed convolutions are used. The nearest-neighbour
  variant, used only for a different accelerator, is not provided.
- **Configuration sizes.** The larger configurations (`C = 8`, `16`, `32`) are
  obtained by changing `C`. `C = 16` needs `SKIP_OFFCHIP = 1` to fit a ZU19EG.
  `C = 2`, `4` and `8` have been simulated; `C = 16` and `32` have not.
