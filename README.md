# Streaming bilinear / bicubic interpolator for 2x image super-resolution

Enlarging an image means computing new pixels between the existing ones.
This design does that as a stream. Camera pixels come in one per clock in
raster order. One interpolated pixel comes out per input pixel, after a
latency of a few clocks. Two choices keep it cheap:

* **No frame store.** The interpolator needs a small neighbourhood around
  each new pixel: 2x2 for bilinear, 4x4 for bicubic. Line buffers hold just
  enough of the last lines to build that neighbourhood. At 256-pixel lines
  the bicubic path stores 3 x 252 pixels plus 16 registers. The bilinear path
  stores 254 pixels plus 4 registers.
* **No multipliers.** The new pixel always sits at the centre of the window.
  So the interpolation weights are fixed small integers, followed by a power
  of two shift. Every product is a shift or a shift-and-add.

Both methods are in the design. A `mode` input picks which one drives the
output. Bilinear is smaller. Bicubic keeps edges sharper.

The structure comes from the paper "Low-Cost Implementation of Bilinear and
Bicubic Image Interpolation for Real-Time Image Super-Resolution" (Khaledyan
et al.). Its block diagrams give the window register chains, the weights and
the shift amounts. The rest was not specified and is this implementation's
own: the handshake, frame and border handling, pipeline cuts, signed
arithmetic, rounding and clamping. The file headers say which is which, and
the list under "Departures and open points" collects them.

## Data flow

```
              +--------------------+  P1..P4   +-----------------+
 pix_in  ---->| sliding_window_2x2 |---------->| bilinear_interp |--+
 pix_valid    |  1 line buffer     |           |  (sum) >> 2     |  |   mode
 sof          +--------------------+           +-----------------+  +--|\
       |                                                               | |--> pix_out
       |      +--------------------+  P1..P16  +-----------------+  +--|/    out_valid
       +----->| sliding_window_4x4 |---------->| bicubic_interp  |--+
              |  3 line buffers    |           |  2 stages, >> 4 |
              +--------------------+           +-----------------+
```

`sr_interp_top` builds both paths side by side. They see the same input
stream, and each has its own window.

## The sliding windows

This part is the easiest to get wrong, so here it is in detail.

The 4x4 window is four rows of four 8-bit registers. Each of the upper three
rows is fed by a line buffer:

```
pix_in -> [P16][P15][P14][P13] -> LB -> [P12][P11][P10][P9]
                                   -> LB -> [P8][P7][P6][P5]
                                   -> LB -> [P4][P3][P2][P1]
```

The whole structure is one long shift path. A pixel enters at P16. It moves
right through its register row, then through a line buffer, then through the
next row up, and so on. For the taps to line up vertically, one row of
registers plus its line buffer must delay by exactly one image line.
Therefore:

* A line buffer is `IMG_WIDTH - 4` entries deep in the 4x4 window.
* It is `IMG_WIDTH - 2` entries deep in the 2x2 window.

Then, if the newest pixel (P16) is at line `y`, column `x`:

* Taps `P(4r+1) .. P(4r+4)` are line `y-3+r`, columns `x-3 .. x`.
* P1 is the oldest (top-left) pixel.
* Output `win[k]` is tap `P(k+1)`.

The 2x2 window works the same way: `pix_in -> [P4][P3] -> LB -> [P2][P1]`.

`line_buffer` is a circular array with one pointer. On every accepted pixel it
reads the oldest entry and overwrites it with the new one. So its output is
the input of exactly `DEPTH` accepted pixels earlier. Only the pointer is
reset. The array and the window registers start with whatever they hold.

**Stalls.** Everything moves only when `pix_valid` is high. The source may
leave gaps anywhere, including inside a line.

**Frames and borders.** Each window counts the column and line of the
incoming pixel. `sof` on the first pixel of a frame sets the count to (0, 0).
A frame cut short can be restarted by `sof`. `win_valid` pulses once per
accepted pixel, only when the whole window lies inside the frame:

* 4x4 window: `x >= 3` and `y >= 3`.
* 2x2 window: `x >= 1` and `y >= 1`.

When the window straddles the end of a line, its taps mix two lines. No
output is produced for those windows. The output therefore has no border
rows or columns:

* bicubic: (W-3) x (H-3) results per W x H frame;
* bilinear: (W-1) x (H-1) results per W x H frame.

The frame height is not a parameter. Only the last four lines are ever held.

## The arithmetic

### Bilinear

`pix_out = (P1 + P2 + P3 + P4) >> 2`

This is bilinear interpolation with both fractional offsets equal to 1/2,
which gives the centre of the 2x2 window. The sum is at most 1020, so the
result always fits 8 bits. The shift truncates.

### Bicubic

Bicubic is evaluated separably. First each row is interpolated horizontally.
Then the four row results are interpolated vertically, with the same
weights:

```
h[r] = (-1*P(4r+1) + 6*P(4r+2) + 5*P(4r+3) + 5*P(4r+4)) >>> 4    r = 0..3
t    = (-1*h[0]    + 6*h[1]    + 5*h[2]    + 5*h[3])    >>> 4
pix_out = clamp(t, 0, 255)
```

The weights are implemented as shift-and-add:

* `6x = 4x + 2x`
* `5x = 4x + x`
* `-x` is a negation.

All intermediate values are signed. The shifts are arithmetic, so they round
towards minus infinity. The ranges are:

* `h` lies in -16 .. 255.
* `t` lies in -32 .. 256.

The clamp matters at both ends:

* A bright top line over dark lines gives a negative value, clamped to 0.
* The 4x4 pattern `255,0,0,0 / 0,255,255,255 / 0,255,255,255 /
  0,255,255,255` gives 256, clamped to 255.

Points to be aware of when judging the output quality:

* **The weights sum to 15, not 16.** A flat area of grey level `v` comes out
  near `(15/16)^2 * v`, about 0.88 v. For example, 255 gives 224 and 100
  gives 87.
* **They are not cubic-convolution weights.** Cubic convolution with the
  usual a = -1/2 kernel gives `-1, 9, 9, -1` (over 16) at the half-pixel
  position. The weights here are asymmetric, so the interpolated point is
  not exactly the window centre.

The RTL uses the weights exactly as the source diagram prints them. They sit
in `interp_pkg` (`BICUBIC_W`, `BICUBIC_SHIFT`), and `bicubic_interp` builds
its shift-and-add from them, so other weights need a change in one place.
Note that `wmul` handles weight magnitudes up to 15. The 16-bit
accumulators stay exact while the weight magnitudes of one stage sum to
about 45 or less.

## Interface and timing (`sr_interp_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | rising-edge clock |
| `rst_n` | in | 1 | synchronous, active-low reset |
| `mode` | in | 1 | 0 = bilinear result on `pix_out`, 1 = bicubic |
| `pix_valid` | in | 1 | `pix_in` carries a pixel this cycle |
| `sof` | in | 1 | this pixel is the first of a frame |
| `pix_in` | in | 8 | grey level, raster order |
| `out_valid` | out | 1 | `pix_out` carries a result this cycle |
| `pix_out` | out | 8 | interpolated pixel |

The parameter is `IMG_WIDTH`, the line length: 256 by default.

Let the clock edge that accepts a pixel be edge 0. The window registers
update on edge 0. The result then appears as follows:

* **Bilinear:** the result register loads on edge 1, so `out_valid` is high
  in the cycle after edge 1.
* **Bicubic:** there is one more register, after the row stage. The result
  loads on edge 2.

Throughput is one result per accepted pixel. There is no back-pressure: the
consumer must take every result.

Which result belongs to which position? Take the newest pixel at (column x,
line y):

* the bilinear result is the point (x-0.5, y-0.5);
* the bicubic result is near (x-1.5, y-1.5).

`mode` drives the output multiplexer directly. Change it between frames,
once the last results have left. That takes two idle clocks.

## Sizes

| configuration | image (W x H) | fits at `IMG_WIDTH = 256`? |
|---|---|---|
| implementation size | 256 x 256 | yes |
| Cameraman, Rice test images | 256 x 256 | yes |
| Coins test image | 300 x 246 | no: build with `IMG_WIDTH = 300` |
| Moon test image | 358 x 537 | no: build with `IMG_WIDTH = 358` |

The sizes of the four test images are those of the standard test
photographs of those names. The source does not state them.

Storage is `(IMG_WIDTH-4)*3 + (IMG_WIDTH-2)` line-buffer entries of 8 bits.
Add 20 window registers. For 256 that is 1010 bytes. The line buffers read
combinationally, which suits distributed (LUT) RAM or registers. They would
need an extra register stage to map onto synchronous block RAM.

## Departures and open points

* **The line-buffer depth.** The source says a line buffer is as long as an
  image line. Its diagram, however, places the window registers in series
  with the buffers. The total delay per row has to be one line, so the
  buffers here are 4 (or 2) entries shorter.
* **Only the window-centre point is produced.** This is the pixel halfway
  between four input pixels. Assembling the 2x enlarged image is not part of
  this RTL. That needs the original pixels, the centre points and the
  half-way points along rows and columns, interleaved. General fractional
  positions (any dx, dy) are not built either. Both would need weights the
  source does not give.
* **Column sum.** The paper's equation for the vertical step repeats the
  second row result in its last three terms. The block diagram uses all four
  row results, and so does this RTL.
* **Added by this design:** the handshake (`pix_valid`, `sof`, `out_valid`),
  border suppression, the pipeline registers, signed arithmetic with floor
  rounding, the clamp, and putting both methods behind one `mode`
  multiplexer. The source implements the two methods as separate designs.
* **Not reproduced:** the FPGA timing and resource figures, and the PSNR and
  SSIM figures. The test photographs are not included, and the testbenches
  use synthetic images.

## Verification

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M`.
The expected values come from `tb/tb_ref_pkg.sv`, which computes them with
plain integer products and explicit floor division, not the RTL's
shift-and-add.

| testbench | what it covers |
|---|---|
| `tb_line_buffer` | delay of exactly DEPTH accepted pixels, random enable gaps |
| `tb_sliding_window_2x2`, `tb_sliding_window_4x4` | every tap at every valid position, `win_valid` exactly at in-frame positions, gaps, restart by `sof` (9-pixel lines) |
| `tb_bilinear_interp`, `tb_bicubic_interp` | random and corner windows, exact latency, both clamps |
| `tb_sr_interp_top` | default size (256-pixel lines, 256x256 frames), see below |
| `tb_workloads` (+ `tb_frame_runner`) | 256x256, 358x537 and 300x246 frames, one per mode, result counts |

`tb_sr_interp_top` runs five frames:

1. a bilinear frame;
2. a bicubic frame;
3. a bicubic frame cut short after 20 lines and restarted by `sof`;
4. a bicubic frame;
5. a bilinear frame.

Idle input cycles are random throughout. It checks every output value and
its exact latency. It also counts each mechanism and fails if one never
occurs: idle cycles, mode switches, frame restart, clamp at 0, clamp at 255,
and results in each mode.

To run a testbench with Verilator 5 from the top folder:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/interp_pkg.sv tb/tb_ref_pkg.sv tb/tb_sr_interp_top.sv \
    --top-module tb_sr_interp_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. Each finishes in about a
second.

## Files

* `rtl/interp_pkg.sv`: pixel type, weights, shifts and the mode enum.
* `rtl/line_buffer.sv`: circular-array delay line.
* `rtl/sliding_window_2x2.sv`, `rtl/sliding_window_4x4.sv`: the window
  generators.
* `rtl/bilinear_interp.sv`, `rtl/bicubic_interp.sv`: the two datapaths.
* `rtl/sr_interp_top.sv`: both paths and the output multiplexer.
* `tb/`: the testbenches above and the reference package.
