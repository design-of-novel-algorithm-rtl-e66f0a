# Gaussian-based colour image enhancement: a streaming RTL implementation

Photographs taken in poor or uneven light have most of their detail packed
into a narrow band of dark intensities. This design spreads that detail over
the full 0..255 display range in real time. It treats each colour component
(red, green, blue) on its own, in three steps:

1. **Smooth.** Convolve the image with a 5x5 Gaussian kernel. This removes
   noise, which the next step would otherwise amplify.
2. **Compress.** Take the base-2 logarithm, `G_L = K * log2(1 + G)`, with
   K = 1.5. The log expands dark values and compresses bright ones.
3. **Stretch.** Apply a gain and an offset:
   `I' = 255 * (G_L - G_Lmin) / (G_Lmax - G_Lmin)`. The frame's darkest
   log value maps to 0 and its brightest to 255.

The hardware is a pure pipeline. It takes one RGB pixel per clock in raster
order and produces one enhanced RGB pixel per clock. It never stalls; it only
waits when the input has no pixel. There is no frame buffer. The only memory
is four line buffers per colour channel.

The algorithm, the 5x5 kernel, K = 1.5, the x32 scaling of the logarithm, the
module split and the structures of the window, the logarithm unit and the
multiplier come from the published design. Everything the publication leaves
open was filled in by this implementation. That includes the fixed-point
formats, the rounding, the image-border behaviour, how the frame minimum and
maximum are obtained, and the valid/timing rules. These choices are marked
below and in each file's header.

## Block structure

```
            gaussian_ie (top)
 rin ──► channel_proc u1_red   ──► ro
 gin ──► channel_proc u2_green ──► go        pixel_valid
 bin ──► channel_proc u3_blue  ──► bo
 din_valid, clk, reset_n go to all three

 channel_proc:
  din ─► serpentine_memory ─► gaussian_conv ─► +1 ─► log_base2 ─► x1.5 ─┬─► reg ─► gain_offset ─► dout
         (5x5 window,         (x kernel,            (priority            │          (subtract,
          4 x row_fifo)        /273)                 encoder +           └─► gl_range  mult8u8u,
                                                     barrel shifter)        (min/max,   /128)
                                                                            gain)
```

The three channels share no logic and run in lockstep. They get the same
`din_valid`, so their valid signals are identical. An assertion in the top
checks this.

| module | role |
|---|---|
| `gie_pkg` | shared widths, types, the kernel table, d_max = 255 |
| `row_fifo` | line buffer: delays a pixel stream by a fixed number of pixels |
| `serpentine_memory` | 5x5 sliding window built from 25 registers and 4 `row_fifo`s |
| `gaussian_conv` | 25 constant-coefficient products, adder tree, divide by 273 |
| `pri_en8to4` | leading-one position (integer part of log2) |
| `barrel_shft` | 3-level left shifter (fraction of log2) |
| `log_base2` | 32*log2(x) from the two units above |
| `mult8u8u` | 5-stage pipelined 8x8 multiplier |
| `gain_offset` | I' = gain * (G_L - G_Lmin), scaled and clamped |
| `gl_range` | per-frame minimum, maximum and gain |
| `channel_proc` | one colour channel, all of the above |
| `gaussian_ie` | top: three channels |

## The sliding window (serpentine memory)

A 5x5 neighbourhood needs pixels from five image lines, but the pixels arrive
one at a time in raster order. The window is a chain:

- The incoming pixel enters five registers, which are window row 5
  (W51..W55).
- The last of those feeds line buffer 4. Its output enters the five registers
  of row 4, and so on.
- Row 1's last register is `pixel_out`.

For row r+1 to hold exactly the pixels one image line above row r, the delay
from W(r+1)5 to W(r)5 must be one line, W pixels. Five registers sit on that
path, so each line buffer must hold **W-5** pixels.

The publication gives two other values:

- The text gives W-3.
- The schematic legend gives W-1.

Neither value lines the rows up with this register chain. A line buffer of
W-3 is one of the broken variants that the window's testbench is shown to
reject.

The line buffer is a circular buffer: one memory, one pointer, read before
write. It therefore needs one memory access per pixel. Its contents are not
reset. A flag makes its output read as 0 until it has been filled once. As a
result, everything before the first pixel of the stream looks like black
pixels.

Indexing: `w[r][c]` is `W(r+1)(c+1)`.

- `w[4][0]` (W51) is the newest pixel.
- `w[r][c]` lies `4-r` lines above it and `c` columns to its left.
- The centre W33 lags the newest pixel by `2W+2` pixels.

`window_valid` rises once `2W+2` pixels have been taken. From then on, each
accepted pixel produces one window. Every input pixel becomes the window
centre exactly once, so the output stream has one pixel per input pixel.

Image borders are not treated specially:

- Near the left and right edges, the window wraps to the neighbouring line.
- At the top of a frame, the window sees the bottom of the previous frame.
- At the top of the first frame, it sees zeros.

## Convolution and the division by 273

`gaussian_conv` computes `round( sum W_rc * G_rc / 273 )`. The window pixels
are zero-extended to 16 bits to match the 16-bit coefficient ports. The
coefficients come from `gie_pkg::GAUSS_5X5`:

```
 1  4  7  4  1
 4 16 26 16  4
 7 26 41 26  7      / 273
 4 16 26 16  4
 1  4  7  4  1
```

Because the coefficients are constants, each product reduces to a
constant-coefficient multiplier. The pipeline has 7 stages:

- 1 stage of products.
- 5 adder-tree stages (25 → 13 → 7 → 4 → 2 → 1).
- 1 normalising stage.

The division is a multiplication by `round(2^24/273) = 61455` followed by a
rounding shift right by 24. Since 273 × 61455 = 2^24 − 1, the result equals
`round(sum/273)` exactly for every sum an 8-bit window can produce. The result
is saturated to 255.

## The logarithm

`log_base2` returns `32 * log2(x)` as an 8-bit number in 3.5 fixed point
(3 integer bits, 5 fraction bits). This 8-bit result is the "log scaled by 32"
of the algorithm: the largest input, 255, gives 255.

- **Integer part.** The priority encoder `pri_en8to4` finds the leading-one
  position n.
- **Shift count.** "Invert and add one" turns n into the shift count 8-n
  (mod 8).
- **Fraction.** The barrel shifter shifts x left by that count. This pushes
  the leading one out and leaves the bits below it as the fraction.

The result is the usual piecewise-linear approximation
`log2(x) ≈ n + (x - 2^n)/2^n`. Its error is at most about 0.086, which is
2.8 output LSBs, plus up to one LSB from cutting the fraction to 5 bits. Input 0 returns 0.

The algorithm takes `log2(1 + G)`, but the log unit has an 8-bit input. The
channel therefore adds 1 with saturation (G = 255 stays 255) before the log.

The channel then scales the log by K = 1.5 (`L + L/2`). The result is the
9-bit log-domain value G_L, range 0..382. In the stretch step K cancels
exactly (it scales both G_L - G_Lmin and G_Lmax - G_Lmin), so it only affects
rounding. It is kept because the algorithm specifies it.

## Gain/offset and the frame statistics

This is the part that the single-pass pipeline cannot do exactly as the
equation reads. The equation needs the minimum and maximum of the current
frame, but those are only known once the frame has passed.
**This design applies the statistics of the previous frame.** For video this
is the usual compromise, since consecutive frames are alike.

**`gl_range`** follows every valid G_L value. It counts frames as
`IMG_WIDTH*IMG_HEIGHT` valid pixels from reset; there is no frame-start input.

- It keeps a running minimum and maximum.
- On the last pixel of a frame, it latches them.
- One clock later, it loads `gl_min` and the gain for the next frame.

The gain is

```
gain = min(255, ceil(255 * 128 / ((G_Lmax - G_Lmin) / 2)))     (128 = 1.0)
```

It uses one single-cycle division per frame. `frame_done` pulses when the new
values appear. After reset, `gl_min = 0` and `gain = 128` (×1.0).

**`gain_offset`** works in three steps:

1. **Subtract.** It computes `(G_L - gl_min) / 2`, clamped at 0 because a
   pixel may be darker than the previous frame's minimum. The halving makes
   the value fit the 8-bit multiplier. The gain is registered together with
   this difference.
2. **Multiply.** The 5-stage multiplier `mult8u8u` multiplies the two.
3. **Scale.** The product is divided by 128 and clamped to 255. The clamp
   applies when a pixel is brighter than the previous frame's maximum.

Because the ceiling is used, the brightest pixel of a frame whose successor
has the same range maps to 255.

The gain has only 8 bits, so it saturates at 255 (×1.99) when the frame's
half range is below 128 log units. Such a frame is then stretched less than
fully.

**Frame alignment.** One register between G_L and `gain_offset` aligns the
pixel stream with the statistics. The last pixel of frame N is processed with
the statistics of frame N-1, and the first pixel of frame N+1 with those of
frame N. The channel testbenches check this to the pixel.

**The multiplier.** `mult8u8u` follows the published schematic:

- **Clock 1.** Eight partial products `P(i+1) = n1 AND n2[i]` are registered.
- **Clock 2.** Pairs are added with a 1-bit shift.
- **Clock 3.** Pairs of those sums are added with a 2-bit shift.
- **Clock 4.** The two halves are added with a 4-bit shift.
- **Clock 5.** The 16-bit product is registered.

## Timing

| | clocks |
|---|---|
| window fill (centre pixel reaches W33) | 2*IMG_WIDTH + 2 |
| convolution | 7 |
| logarithm | 2 |
| K scaling | 1 |
| statistics alignment | 1 |
| gain/offset (subtract 1, multiply 5, scale 1) | 7 |
| **total with din_valid high every clock** | **2*IMG_WIDTH + 20 = 532 at 256** |

Latency is counted from the clock edge that takes the input pixel to the edge
after which its result is on `ro/go/bo` with `pixel_valid` high. The
published latency is 535 clocks. The 3-clock difference comes from pipeline
stage counts that the publication does not give.

When `din_valid` has gaps, the output for pixel c leaves 18 clocks after the
pixel that completes its window (pixel c + 2W + 2) is taken. The last 2W+2
pixels of a frame come out only when as many further pixels have been
supplied: the next frame, or blanking pixels with `din_valid` high.

Throughput is one pixel per clock. A 1600x1200 stream at 117 frames/s needs
224.6 MHz. That is the clock rate published for the original FPGA
implementation; this RTL's clock rate has not been measured.

## Top-level interface (`gaussian_ie`)

| port | dir | width | meaning |
|---|---|---|---|
| clk | in | 1 | clock; everything is rising-edge |
| reset_n | in | 1 | asynchronous, active-low reset |
| rin, gin, bin | in | 8 | input pixel, raster order |
| din_valid | in | 1 | input pixel present this clock |
| ro, go, bo | out | 8 | enhanced pixel |
| pixel_valid | out | 1 | ro/go/bo valid this clock |

| parameter | default | meaning |
|---|---|---|
| IMG_WIDTH | 256 | pixels per line; sets the line-buffer depth (IMG_WIDTH-5) |
| IMG_HEIGHT | 256 | lines per frame; with IMG_WIDTH, sets the frame used for the statistics |

IMG_WIDTH must be at least 6. For 1600x1200 video, set `IMG_WIDTH=1600,
IMG_HEIGHT=1200`.

Storage at the defaults:

- Per channel: 4 × 251 × 8 bits of line buffer, 24,096 bits for all three
  channels.
- Besides the line buffers, a generic synthesis of the top finds about 4,200
  flip-flop bits, mostly the convolution's adder tree.

## Departures from the published design and open points

- **Line-buffer depth.** This design uses W-5. The publication gives W-3 in
  the text and W-1 in a figure; see above.
- **Input valid.** `din_valid` is an input of the top and the window's
  shift-enable. The published signal table has no input valid, but its
  simulation uses `din_valid`. The published top also shows a packed 24-bit
  variant (`din`/`dout`/`data_val`). This design uses the separate
  `rin/gin/bin` ports of the signal table.
- **Frame statistics.** G_Lmin and G_Lmax come from the previous frame
  (`gl_range`). The publication does not say how they are obtained.
- **Gain format.** The gain is 8 bits with 128 = 1.0. The difference is halved
  to fit the 8-bit multiplier, and the gain saturates for narrow ranges.
- **Fixed-point and edge details.** These are this design's own: log2 of 0 is
  0, the +1 saturates at 255, the division rounds, and image borders wrap.
- **Latency.** 532 clocks instead of the published 535.
- **`log_base2` reset.** It has no reset, matching its published signal
  diagram. Its valid output becomes defined two clocks after its input is.
  Reset must be held for at least that long, which the whole design needs
  anyway while the convolution's valid is reset.
- **3x3 vs 5x5 window.** The published flow chart shows a 3x3 window; its text
  uses 5x5 throughout. 5x5 is built.

Not included: any image-file input/output, colour-space conversion, and
anything of the FPGA-specific implementation (clocking, I/O).

## Verification

Each module has a self-checking testbench in `tb/`. Each prints one line,
`TB_RESULT checks=N failures=M`.

The expected values come from `tb/gie_ref_pkg.sv`, a reference model written
from the equations:

- The window is taken from a plain array.
- The log is computed with integer arithmetic.
- Each frame's statistics are found by scanning the whole previous frame.

| testbench | what it checks |
|---|---|
| `tb_row_fifo` | delay of exactly DEPTH accepted pixels, zeros before filled, random enable gaps |
| `tb_serpentine_memory` | all 25 taps after every pixel (W = 12, random gaps), window_valid rule |
| `tb_gaussian_conv` | random, all-0, all-255 and impulse windows; exact rounding; 7-clock latency |
| `tb_pri_en8to4`, `tb_barrel_shft` | exhaustive |
| `tb_log_base2` | all 256 inputs; 2-clock latency |
| `tb_mult8u8u` | corner and random operands; 5-clock latency |
| `tb_gain_offset` | random values including clamps; 7-clock latency |
| `tb_gl_range` | min/gain of wide, narrow and flat frames; update 2 clocks after the last pixel |
| `tb_channel_proc` | one channel on 16x8 frames with random gaps, every output and its timing |
| `tb_gaussian_ie` | whole RGB system at the default 256x256, four frames plus flush |
| `tb_gaussian_ie_1600x1200` | the same test, three frames, with the top configured for 1600x1200 video |

`tb_gaussian_ie` feeds synthetic frames that exercise every special case:

- dark and low contrast, so the gain saturates;
- bright with a saturated square, so the log input saturates and the output
  clamps;
- full range with a white and a black square, so pixels fall below the
  previous minimum and the gain changes.

It fails if any of these, or an input gap, never happens. It also checks the
532-clock latency on the gap-free first frame.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/gie_pkg.sv tb/gie_ref_pkg.sv \
          tb/tb_gaussian_ie.sv --top-module tb_gaussian_ie -Mdir obj -o sim
./obj/sim
```

The full 256x256 run (about 270,000 clocks) takes a few seconds; the
1600x1200 run (about 6 million clocks) takes under half a minute.
