# Skin-region detection and skin-tone adjustment pipeline (SystemVerilog)

This is a streaming video pipeline that finds skin-coloured regions in an RGB
image and lets a user push the skin tone toward red, yellow, green or
magenta. Every pixel passes through, at one pixel per clock. A pixel counts
as skin when two colour models both accept it: a parallelogram in the Cg-Cr
plane of the YCgCr colour space and a rectangle in the I-Q plane of YIQ.
Pixels on strong texture, very dark pixels and pixels whose colour ordering
is not R > G > B are rejected. A morphological opening then cleans up the
binary skin mask. For pixels that survive, I and Q are scaled by
user-programmed percentages, and the image is converted back to RGB.

The RTL follows the architecture of "An FPGA-based Parallel Architecture
for Face Detection using Mixed Color Models" (Luo Tao, Zaifeng Shi). The
paper gives the colour transforms, the skin models, the rejection rules,
the structuring element and the adjustment formula. It does not give word
lengths, the texture threshold, the frame size, the stream timing or the
inverse colour matrix. Those are this design's choices, and each one is
listed below.

## Data flow

```
 3-line RGB in ─► texture_detect ─┬─► rgb2yiq ───┬─────────────► yiq_buffer (FIFO) ─┐
 (rows y-1,y,y+1)  3x3 gradient,  │              │                                   │ pop per mask bit
                   colour rules   └─► rgb2ycgcr ─┴─► skin_detect ─► morph_open ──────┤
                   (non-skin bit) ────(delayed)────►  (AND of 3)     (erode, dilate) │
                                                                                     ▼
                         user_regs (I_range, Q_range) ──────────────► skin_tone_adjust ─► yiq2rgb ─► RGB out
```

| module | role | latency |
|---|---|---|
| `texture_detect` | 3x3 gray window, gradient threshold, colour rules | 1-2 cycles, one output per input column |
| `rgb2yiq`, `rgb2ycgcr` | colour transforms | 2 cycles |
| `skin_detect` | the two skin models, then AND with the inverted texture bit | 1 cycle |
| `morph_open` (`morph_window` x2) | binary opening, radius-2 diamond | about 2 lines + 2 pixels per stage |
| `yiq_buffer` | holds Y, I, Q until the pixel's opened mask bit arrives | FIFO |
| `user_regs` | two Q15 range registers, applied at frame boundaries | - |
| `skin_tone_adjust` | I and Q scaling for skin pixels | 1 cycle |
| `yiq2rgb` | back to RGB | 2 cycles |
| `face_detect_top` | the whole chain | about 4 lines + 12 cycles |

`face_pkg` holds the pixel structs (`rgb_t`, `yiq_t`, `ycc_t`), the
coefficient tables and the clamp functions.

## Number formats

- RGB: 8 bits per channel.
- YIQ: Y is an unsigned 8-bit value. I and Q are 9-bit signed integers,
  because 8-bit RGB gives |I| <= 152 and |Q| <= 134.
- YCgCr: 8 bits unsigned, with the offsets 16/128/128 of the standard form.
- All matrix coefficients are integers scaled by 1024. Results are rounded
  to the nearest integer.
- The two user registers are signed Q15 fractions: value / 32768 is the
  relative change, from -100 % (-32768) to +99.997 % (32767). The paper's
  example, -18 %, is -5898.

The transforms:

```
Y  =  0.299 R + 0.587 G + 0.114 B
I  =  0.596 R - 0.274 G - 0.322 B
Q  =  0.212 R - 0.523 G + 0.311 B

Y  = 16  + ( 65.481 R + 128.553 G + 24.966 B) / 255
Cg = 128 + (-81.085 R + 112     G - 30.915 B) / 255
Cr = 128 + ( 112    R -  93.786 G - 18.214 B) / 255

R = Y + 0.955 I + 0.622 Q
G = Y - 0.271 I - 0.648 Q
B = Y - 1.107 I + 1.702 Q
```

The paper prints the last coefficient of Q as -0.311. With that sign a gray
pixel would get a large negative Q, which contradicts the paper's own point
that YIQ separates gray from colour. This design uses +0.311, the standard
YIQ value. The YCgCr coefficients in the paper are for RGB in [0,1], so here
they are divided by 255. The paper does not give the inverse matrix. The one
used here is the numerical inverse of the forward YIQ matrix.

## Input format and texture detection

The input is the paper's 3-line parallel video. Each beat (`in_valid`,
`in_col[0..2]`) carries the pixels of rows y-1, y and y+1 at one column.
Beats arrive in raster order of the centre row y. For the first and last
row the source repeats the edge row. So the texture block needs no line
buffers of its own.

`texture_detect` converts each incoming pixel to gray (the Y row above) and
keeps the last two gray columns. When column x arrives, the block decides
the centre pixel of column x-1 from columns x-2, x-1 and x. That decision
gives the non-skin bit:

```
texture = max(3x3 gray) - min(3x3 gray) > TEX_THRESH      (default 40)
dark    = R < 80 and G < 80 and B < 80
hue     = R < 230 and G < 230 and B < 230 and not (R > G > B)
tex_out = texture or dark or hue
```

The left and right image edges are handled by repeating the edge column.
The last column of a row is decided one cycle after it arrives. The next
row's first column never produces an output, so that slot is always free,
and the output stays at exactly one pixel per input beat.

The centre pixel's RGB travels with the bit into the two colour transforms.
The bit is delayed by two cycles to stay aligned with them.

## Skin decision

`skin_detect` applies the two models with inclusive bounds:

```
Cg-Cr parallelogram:  85 <= Cg <= 135  and  260 <= Cg + Cr <= 280
I-Q rectangle:        15 <= I  <= 90   and  -20 <= Q <= 10
skin = parallelogram and rectangle and not tex_out
```

The block also outputs the two model results separately.

## The morphological opening

This block is the least obvious part of the design.

The opening is an erosion followed by a dilation, both with the same
structuring element B. Here B is the diamond of radius 2: all 13 offsets
with |dx| + |dy| <= 2. Erosion outputs the AND of the pixels under B, and
dilation outputs their OR. Together they remove skin regions too small to
hold B, cut thin bridges and smooth contours. Pixels outside the image
count as 1 for erosion and 0 for dilation, so the image border does not
erode away.

Each stage (`morph_window`) works on a stream of single bits. It has:

- **Line buffers.** One WIDTH-entry array, 4 bits wide, holds the previous
  four rows of every column. On each pixel, the array entry for that column
  is read, combined with the new bit into a 5-row column vector, and written
  back shifted by one row.
- **Window.** A 5-column shift register of these column vectors.
- **Step.** Every accepted pixel at (x, y) is one step. The step produces
  the result for the centre (x-2, y-2). Rows or columns outside the image
  are replaced by the padding value.
- **Row tails.** At the last column of a row the window has no right-hand
  neighbours for the two rightmost centres. The stage copies the window into
  a tail register and emits those two results on the next two cycles. Those
  cycles line up with the next row's columns 0 and 1, which never produce an
  output themselves. So the output stays one bit per input bit, in raster
  order, without stalling the input inside a frame.
- **End-of-frame flush.** The last two rows of a frame need two more rows of
  input that do not exist. After a frame's last pixel the stage steps two
  padding rows on its own, one per clock (2 x WIDTH cycles), and raises
  `busy`. A pixel that arrives during the flush is dropped and sets the
  sticky `overrun` flag.

Two such stages in series therefore need about 4 x WIDTH + 16 idle input
cycles between frames: 2,576 cycles at a width of 640. Normal video
vertical blanking is longer than that. The safe rule for a source is to
start a new frame only while the top's `busy` output is low. The frames are
counted from reset: a frame is exactly WIDTH x HEIGHT pixels, and there is
no start-of-frame signal.

The paper's Sec. 3 mentions a "3x3 structuring element ... used in
morphological gradient". Its Sec. 2.3 and Fig. 2 define the opening's B as
the radius-2 diamond. This design reads the 3x3 element as the texture
gradient's and uses the diamond for the opening. `RADIUS` is a parameter of
`morph_open`.

## Keeping pixel data aligned with its mask

The opening adds a delay of about four lines, and because of the flush that
delay is not fixed. So Y, I, Q do not go through a matching delay line.
Instead they are pushed into `yiq_buffer`, a FIFO, as each pixel leaves the
colour transform. They are popped whenever the opening emits a mask bit.
Both streams are in raster order, one entry per pixel, so they stay
aligned. The default depth of 4096 covers the roughly 4 x 640 + 20 pixels
in flight at a width of 640. The top asserts that the FIFO never overflows
or underflows, and reports sticky flags on `buf_error`.

## Skin-tone adjustment and the user registers

For a pixel whose opened mask bit is 1:

```
I_out = I + round(I * I_range / 32768)
Q_out = Q + round(Q * Q_range / 32768)      (saturated to the 9-bit range)
```

Y is never changed, and non-skin pixels pass through unchanged. The signs of
the two ranges pick the direction:

| I_range | Q_range | skin tone moves toward |
|---|---|---|
| + | + | red |
| + | - | yellow |
| - | - | green |
| - | + | magenta |

`user_regs` is written through `wr_en`, `wr_addr` (0 = I, 1 = Q) and
`wr_data`. A write lands in a pending register. The top copies the pending
pair to the adjuster only when the adjuster sits between frames, so one
frame is never adjusted with two settings. After reset both ranges are 0,
which means no change. The write port and the frame-boundary rule are this
design's own choices. The paper only says that the settings are two 16-bit
signed registers.

## Top-level interface (`face_detect_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock (the paper's camera runs at 33 MHz); asynchronous active-low reset |
| `in_valid`, `in_col[3]` | in | 3-line parallel RGB input, one column per beat |
| `wr_en`, `wr_addr`, `wr_data[15:0]` | in | user register write |
| `out_valid`, `out_rgb`, `out_skin` | out | adjusted pixel in raster order, and its final skin mask |
| `busy` | out | the opening is flushing or still has output pending; do not start a frame |
| `overrun` | out | sticky: input arrived during a flush |
| `buf_error` | out | sticky: YIQ buffer overflow or underflow |

The parameters are `WIDTH` (640), `HEIGHT` (480), `TEX_THRESH` (40) and
`BUF_DEPTH` (4096). The paper gives no frame size; 640 x 480 is an
assumption. The input can have idle cycles anywhere inside a frame. If the
input has no gaps, the output has none either.

## What is not here

- The paper's flow chart (Fig. 1) also names "image preprocessing" and
  "face candidate verification". Neither is described, and neither appears
  in the hardware architecture, so neither is built.
- The camera interface is not described either. Testbenches drive the
  3-line input directly.
- The paper's resource and power figures (a Virtex-5 with 536 kbit of block
  RAM and about 83,000 flip-flops, 8.9 W) cannot be compared with this RTL
  block by block. At the defaults this design synthesises to about 113 kbit
  of memory and under 400 flip-flops.

## How far to trust it

Every block has a self-checking testbench in `tb/`. Each one compares the
block with a model written separately in the testbench:

- The colour transforms are checked against floating-point matrices to
  within 1 LSB (2 LSB for the full RGB-YIQ-RGB round trip).
- The texture block and the opening are checked against plain 2-D
  reference implementations. The opening test also includes the paper's
  worked example, the 9 x 9 image of its Fig. 2, and reproduces the
  printed result.
- The adjuster is checked against eq. (5) in floating point.

`tb_face_detect_top` runs four 24 x 16 frames end to end, one for each
adjustment direction. It checks every output pixel exactly against an
integer model of the whole chain. It also counts that each mechanism
happened: texture, dark and hue rejections, skin pixels, pixels removed by
the opening, adjusted pixels, flush cycles, and register updates held back
until the frame boundary. In the gap-free frame it checks that output comes
one pixel per clock. `tb_face_detect_full` runs the same test at the
default 640 x 480 size, for two frames.

What remains unverified is whether the thresholds (the texture threshold in
particular) reproduce the detection rates the paper reports. Those rates
were measured on images that are not available.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/face_pkg.sv \
          tb/tb_face_detect_top.sv --top-module tb_face_detect_top -o sim
./obj_dir/sim
```

Swap in any other `tb_*` name to run that testbench. Each testbench prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The full-size
run (`tb_face_detect_full`) takes about 15 seconds.

To change the design:

- The skin-model bounds are parameters of `skin_detect`.
- The colour-rule limits and the texture threshold are parameters of
  `texture_detect`.
- The coefficient tables are in `face_pkg`.
- A different frame width needs `BUF_DEPTH` of at least about
  4 x WIDTH + 64.
