# Streaming CNN super-resolution with a deconvolution turned into a convolution

This is synthesizable SystemVerilog for a video super-resolution engine. It
takes a low-resolution (LR) RGB stream straight from a display driver and
produces the high-resolution (HR) image, scaled by 2, 3 or 4, with no frame
memory. The luma channel goes through a small convolutional network, Light
FSRCNN (25,5,1). The two chroma channels are upscaled with bicubic
interpolation.

Two ideas make one LR pixel per clock possible without off-chip memory:

* **Every loop of every layer is unrolled.** Each convolution layer has one
  multiplier per weight, so it takes one input pixel (all channels) per clock
  and produces one output pixel (all channels) per clock. The layers then
  connect through a few line buffers and nothing else.
* **The deconvolution is computed as a convolution (TDC).** The final layer
  upsamples with a stride-S deconvolution. Here it is rewritten so that each
  LR window produces one whole S x S block of HR pixels. Blocks never overlap,
  so nothing has to be read back, accumulated and written again.

The network (kernel, outputs, inputs per layer):

| layer | operation | weights | activation |
|---|---|---|---|
| 1 | 5x5 conv, 1 -> 25 maps | 625 | PReLU |
| 2 | 1x1 conv, 25 -> 5 | 125 | PReLU |
| 3 | 3x3 conv, 5 -> 5 | 225 | PReLU |
| 4 | 1x1 conv, 5 -> 25 | 125 | PReLU |
| 5 | 7x7 deconvolution, 25 -> 1, stride S | 1225 | none |

That is 2325 multipliers, all running every clock.

## Data flow

```
 RGB in --> rgb2ycbcr --+-- Y --> line_buffer(5) --> combined_clp #1 (5x5 conv + 1x1 conv)
                        |        --> line_buffer(3) --> combined_clp #2 (3x3 conv + 1x1 conv)
                        |        --> line_buffer(4) --> dclp (TDC deconvolution) -- S*S luma --+
                        |                                                                        |
                        +-- Cb,Cr --> line_buffer(4) --> bicubic_kernel --> chroma_buffer -------+
                                                                                                 |
                        sr_controller (raster position, configuration)       16 x ycbcr2rgb <----+
                        weight_buffer (all weights, one deconvolution set                |
                                       per scale)                          hr_raster_buffer --> HR out
```

A *combined CLP* is a KxK convolution processor whose outputs feed a 1x1
convolution processor directly. A 1x1 layer needs no neighbours, so it needs
no line buffer in front of it. That is why there are only three luma line
buffers for five layers.

## The raster and zero padding

Every pixel and every window travels with its position (x, y) in the LR
raster, blanking included (`w_tot` x `h_tot` positions, of which `w_act` x
`h_act` are the image). The controller counts positions from the
start-of-frame flag. Positions in the blanking area carry the value zero.
Each processor also forces its output to zero when the position it writes is
outside the image.

So a window that reaches over the image border picks up zeros from the
blanking. This is exactly zero padding, with no border logic anywhere. It
works only while the blanking is at least as wide as the deepest look-ahead
of the chain: at least 8 columns and 8 lines. The defaults are 16 and 16, so
a QHD frame (1440 x 640 LR) runs in a 1456 x 656 raster. `WMAX`, the number of
raster positions one line buffer holds, is 1456.

A processor with a KxK window labels its output with the window centre,
(K-1)/2 columns and lines behind the newest pixel. Positions wrap around the
raster. The next line buffer therefore sees a stream that is again in raster
order, only later. The whole pipeline is a set of shift registers and line
memories that never stall. The input has no back-pressure (`in_valid` may
simply drop), and every stage passes `valid` along with its data.

The configuration (`scale`, `w_act`, `h_act`, `w_tot`, `h_tot`) is written at
any time through `cfg_we`/`cfg_in`. It takes effect at the next pixel with
`in_sof`, so a frame never mixes two settings.

## Deconvolution as convolution

A stride-S deconvolution with a KD x KD kernel (KD = 7) lets each LR pixel
`in(i,j)` add `in(i,j) * w[yd][xd]` into HR pixel `(S*i + yd, S*j + xd)`. Seen
from the output side, HR pixel (Y, X) collects the taps with
`yd = Y - S*i` and `xd = X - S*j`. The taps that hit one HR pixel therefore
all share the phase `(Y mod S, X mod S)` and are S apart. An S x S block of HR
pixels (one per phase) needs a Kc x Kc window of LR pixels, where

    Kc = 4, 3, 2   for S = 2, 3, 4   (KD = 7)

Kc comes from `N_O = floor(KD/2) / S`. When the fraction of N_O is at least
one half (S = 2 and S = 4), the window is even-sized and shifted by one
(`delta = 1`). Otherwise (S = 3) it is odd-sized and centred (`delta = 0`).

### The inverse mapping

The design never builds the S*S sparse Kc x Kc filters. Instead, each
deconvolution tap `d` (per axis) goes to exactly one window input `i` and one
block output `o`:

    q = KD + delta - d
    i = ceil(q / S) - 1        (window column, 0 = oldest)
    o = S * ceil(q / S) - q    (phase inside the block)

| S | d=0 | d=1 | d=2 | d=3 | d=4 | d=5 | d=6 |
|---|---|---|---|---|---|---|---|
| 2 (Kc 4) | i3,o0 | i3,o1 | i2,o0 | i2,o1 | i1,o0 | i1,o1 | i0,o0 |
| 3 (Kc 3) | i2,o2 | i1,o0 | i1,o1 | i1,o2 | i0,o0 | i0,o1 | i0,o2 |
| 4 (Kc 2) | i1,o0 | i1,o1 | i1,o2 | i1,o3 | i0,o0 | i0,o1 | i0,o2 |

In 2-D, tap (yd, xd) reads window input (i(yd), i(xd)) and adds into output
lane `o(yd)*S + o(xd)`. As a result, `dclp` has exactly KD*KD = 49 multipliers
per input map at every scale, 1225 in all:

1. **Input select.** Each multiplier's input is chosen from the 4x4 window by
   a 3-way multiplexer on the scale. The mapping is a constant of the scale,
   computed by the functions `tdc_in`/`tdc_out` in `sr_pkg` when the design
   is built.
2. **Sum over maps.** For each tap, an adder tree sums the 25 input-map
   products.
3. **Output-index routing.** Each of the 16 output lanes adds the taps whose
   output index is that lane. The lanes have a fixed pattern per scale, and
   the scale selects one pattern. Lanes at or above S*S are zero.
4. **Bias and quantisation.** Each lane goes through an activation engine with
   PReLU bypassed.

The lanes do unequal amounts of work. At S = 4, for example, the phase-3
column gets one tap per axis and the others two. This costs nothing, because
every tap has its own multiplier and no multiplier ever waits on a zero
weight. This is the fully load-balanced end point of the sparse TDC
scheduling. A time-multiplexed processor would instead have to distribute
the non-zero weights evenly among its MAC units.

### Alignment

The window is the 4x4 window of the newest pixel. A scale with Kc < 4 uses
its top-left Kc x Kc part. The block produced for window position (x, y)
belongs to LR pixel `(x, y) - 2` for S = 2 and to `(x, y) - 3` for S = 3 and 4.
With this choice the HR image is the full deconvolution cropped by 4 pixels at
the top and left:

    hr[Y][X] = bias + sum_n sum_(i,j) in_n[i][j] * w_n[Y + 4 - S*i][X + 4 - S*j]

This is how the HR image lines up with the LR image (HR pixel S*x+S/2 sits
near LR pixel x). Any other crop would only move the constants.

## Convolution processors

`clp` is one layer with every loop unrolled (M output maps, N input maps,
KxK kernel):

* M x N multiply engines, each forming the K*K products of one window with
  one filter in one clock (`mult_engine`);
* M x N kernel adder trees (`adder_tree`), one level per clock;
* M feature-map adder trees over the N maps;
* M activation engines (`prelu_engine`): add the bias, multiply negative sums
  by the PReLU slope, quantise.

Latency is `1 + ceil(log2 K*K) + ceil(log2 N) + 2` clocks (log terms at least
1). The line buffer adds 2 clocks.

| stage | latency (clocks) |
|---|---|
| line buffer | 2 |
| combined CLP 1 (5x5, N=1 then 1x1, N=25) | 9 + 9 |
| combined CLP 2 (3x3, N=5 then 1x1, N=5) | 10 + 7 |
| deconvolution (N=25) | 9 |

`line_buffer` keeps K-1 lines in K-1 single-port-per-side memories, used
cyclically (one read and one write per clock at the same address). It shifts
one new column into a KxK register window each clock. Until a bank has been
filled once after reset it reads as zero.

## Number formats

All pixels, weights, biases and slopes are 13-bit two's complement:

* activations: 8 fraction bits (an 8-bit luma code y is the value y/256);
* weights and PReLU slopes: 10 fraction bits;
* biases: the activation format.

Products (26 bits) and all sums inside one neuron are kept at full width. The
result is quantised once, after the activation: shifted down (floor) and
saturated to 13 bits. The network output is clamped to 0..255 as luma. The
multipliers are plain 13 x 13 signed products. On an FPGA, two of them sharing
an operand can be packed into one DSP slice; that mapping is left to
synthesis.

## Chroma path

Cb and Cr enter the pipeline as signed offsets from 128, so the zero padding
is neutral grey. A 4-line buffer gives the 4x4 neighbourhood of each LR pixel.
`bicubic_kernel` evaluates the separable Keys cubic (a = -0.5) at the S x S
phases (yo/S, xo/S), with 7-bit coefficients from a table computed when the
design is built. It writes the S x S chroma block, for LR pixel (x, y) - 2,
into `chroma_buffer`. That buffer holds 8 LR lines of blocks, addressed by
position. The block is read back when the luma block of the same position
leaves the deconvolution about three lines later.

Colour conversion uses full-range BT.601 with coefficients rounded to 1/256:

    Y  = (77R + 150G + 29B + 128) >> 8
    Cb = ((-43R - 85G + 128B + 128) >> 8) + 128
    Cr = ((128R - 107G - 21B + 128) >> 8) + 128
    R = Y + ((359 cr + 128) >> 8)
    G = Y - ((88 cb + 183 cr + 128) >> 8)
    B = Y + ((454 cb + 128) >> 8)        (cb, cr = C - 128)

## Output reordering

For each LR pixel the deconvolution yields the S x S HR pixels below and
right of (S*x, S*y). `hr_raster_buffer` turns these blocks into HR raster
order:

* The blocks of one LR line go into one of two banks (LR line parity).
* When a line is complete, the bank is read as S HR lines, giving S*S
  consecutive HR pixels per clock. These come from at most four neighbouring
  blocks, read through four ports.
* A line is read in `S*ceil(w_act/S)` clocks, less than the `w_tot` clocks it
  takes to fill one, so the two banks never collide. A collision would raise
  `overrun`.
* When `w_act` is not a multiple of S, the last clock of each HR line carries
  fewer pixels. The lanes past the line end are zero.

## Weights

`weight_buffer` is one 13-bit register per word, loaded through
`wb_we`/`wb_addr`/`wb_data` before the first frame. Its outputs fan out to
every multiplier. There is one deconvolution set per scale, and `cfg.scale`
selects it. The address map (word offsets) is in `sr_pkg` (`WA_*`):

| range | contents | order |
|---|---|---|
| 0 - 624 | layer 1 weights | [m][ky][kx] |
| 625 - 749 | layer 2 weights | [m][n] |
| 750 - 974 | layer 3 weights | [m][n][ky][kx] |
| 975 - 1099 | layer 4 weights | [m][n] |
| 1100 - 1159 | biases, layers 1-4 | 25, 5, 5, 25 |
| 1160 - 1219 | PReLU slopes, layers 1-4 | 25, 5, 5, 25 |
| 1220 - 1222 | deconvolution bias | for S = 2, 3, 4 |
| 1223 - 4897 | deconvolution weights | [S-2][n][yd][xd] |

## Top-level interface (`sr_top`)

| port | meaning |
|---|---|
| `clk`, `rst_n` | clock (130 MHz gives the rates below), asynchronous active-low reset |
| `cfg_we`, `cfg_in` | configuration (`cfg_t`: scale, w_act, h_act, w_tot, h_tot), applied at the next start of frame |
| `wb_we`, `wb_addr`, `wb_data` | weight load port |
| `in_valid`, `in_sof`, `in_r/g/b` | LR pixel stream in raster order, blanking included; `in_sof` marks position (0,0) |
| `hr_valid`, `hr_x`, `hr_y`, `hr_pix[16]` | HR output: `hr_pix[j]` = {R,G,B} of HR pixel (`hr_y`, `hr_x + j`) for j < S*S |
| `overrun` | the HR line buffer was overrun (blanking too short) |

The reset configuration is the QHD case: S = 2, 1440 x 640 active, 1456 x 656
raster. One LR pixel per clock gives 955,136 clocks per frame (136 fps at
130 MHz). The HR lines of an LR line leave about six LR lines after that line
entered (the look-ahead of the three windows plus the reordering).

## Where this design departs from the source architecture

* **Partial sums.** The reference design quantises pixels, weights and
  partial sums to 13 bits. Here only pixels and weights are 13 bits; sums stay
  exact until the activation.
* **Blanking.** Zero padding comes from the blanking interval, which must be
  at least 8 columns and 8 lines. The reference quotes 141 fps for QHD at
  130 MHz, which is close to one pixel per clock with no blanking at all. This
  design reaches 136 fps with its default blanking (138.5 fps with the minimum
  8 + 8).
* **Line buffer size.** `WMAX` = 1456 covers 1440-pixel LR lines. UHD output
  from full-HD input needs `WMAX` >= 1928. The reference notes that this case
  needs about twice the block RAM.
* **Where the HR line buffer sits.** The reference draws the HR line buffer
  on the luma path, before the conversion back to RGB. Here it comes after the
  conversion and holds RGB, so one buffer reorders luma and chroma together.
* **Pipeline depths.** The multiply, adder-tree and activation stages use one
  register per multiplier, tree level and activation step. The reference's
  timing diagrams show deeper pipelines; only the latency differs.
* **Output index.** The output index of each tap is computed from the scale
  when the design is built, not stored next to the weights. With every loop
  unrolled it is a constant.
* **Weight and scale loading.** These are plain ports. The reference changes
  them through an FPGA debug core.
* **Things the reference does not specify and that are this design's
  choice:** the colour matrices, the bicubic kernel, the fixed-point split,
  the HR alignment (crop 4), the depth and organisation of the chroma and HR
  buffers, and the output pixel format.

## Verification

Each module has a self-checking testbench in `tb/`. Each one:

* drives the module with random data;
* compares against a model written independently in the testbench;
* checks latency;
* has a watchdog;
* ends with a `TB_RESULT checks=N failures=M` line.

The deconvolution testbench checks the TDC processor against the scatter
form of the deconvolution above. It does not use the TDC mapping functions.

`tb/sr_ref_pkg.sv` is a behavioural model of the whole system. It makes
random weights from a seed, applies them through the weight port, and
computes the network on arrays. The deconvolution is done by scattering each
LR pixel's 7x7 kernel into the HR image, which is the direct definition, not
TDC. Bicubic chroma is computed in real arithmetic.

There are two system testbenches:

* `tb_sr_top` runs a 12 x 8 image in a 24 x 20 raster. It runs two frames at
  each of S = 2, 3, 4, switching the scale between frames, with random input
  gaps. It compares every HR pixel bit-exactly and counts these mechanisms,
  failing any that never occurs:
  * frames per scale;
  * input gaps;
  * negative PReLU inputs;
  * border pixels (zero padding);
  * duplicate or missing outputs.
* `tb_sr_top_full` runs `sr_top` with all defaults: one 1440 x 640 frame at
  S = 2, about 0.95 M clocks, a couple of minutes in total with Verilator. It
  checks that each of the 2880 x 1280 HR pixels arrives exactly once, the
  frame time, and three 4-line bands (top, middle, bottom) bit-exactly against
  the model.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl --top-module tb_sr_top \
    rtl/sr_pkg.sv tb/sr_ref_pkg.sv tb/tb_sr_top.sv -o sim
./obj_dir/sim
```

Unit testbenches need only `rtl/sr_pkg.sv` and their own file (with `-y rtl`
for the modules). Parameters that can be changed safely: `WMAX` of `sr_top`
for wider lines, and the layer sizes in `sr_pkg` (the weight map follows
them). Changing `KD` changes Kc and the mapping through the `tdc_*`
functions; the window size `KCMAX` must then be set to the largest Kc.
