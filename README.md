# Streaming lens-distortion correction with a subsampled map

A camera lens bends straight lines. To undo this, every pixel (x, y) of the
corrected image is taken from a point (x + dx, y + dy) of the raw image, where
the displacement (dx, dy) comes from the lens calibration and is in general
not an integer. The corrected pixel is then the bilinear interpolation of the
four raw pixels around that point.

Software stores one displacement pair per pixel. For a VGA frame that is
307,200 pairs, too many for on-chip memory. This design keeps one pair every
8 pixels in each direction instead: 81 x 61 = 4941 nodes. The displacement of
any pixel is interpolated bilinearly from the four nodes around it. The raw
image is not stored whole either. A circular buffer of 50 lines holds the rows
the current output line can need. The corrected image leaves the chip as a
stream at the input pixel rate, a number of lines behind the input that is set together
with the map.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. The defaults are
a 640x480 stream of 8-bit grey pixels, a 50-line buffer, a map node every 8
pixels, and displacements in signed fixed point with 8 fractional bits.

## Data path

One pixel enters and one pixel leaves per clock. There is no back-pressure.

```
 input stream ──► address_manager ──► buffer_write_manager ──► buffer_memory x4
 (in_valid,        │  write address        (memory select,            │
  in_sof,          │                         address)                 │ quartet
  in_pixel)        │ output raster, `delay` lines behind              │
                   ▼                                                  ▼
                map_module ──► buffer_read_manager ──► buffer_memory x4 ──► pixel_interpolation ──► output stream
           (map_sample_memory,   (quartet addresses,      (read)              (bilinear, round,
            2 x bilinear_interp)  weights, border rules)                        fill)
```

| module | job | clocks |
|---|---|---|
| `address_manager` | counts the input raster; issues the output raster `delay` lines behind | 1 |
| `buffer_write_manager` | picks one of the four memories for each input pixel, and the address inside it | 1 |
| `buffer_memory` (x4) | simple dual-port RAM, synchronous read | 1 |
| `map_module` | reads the four map nodes of the pixel's cell and interpolates dx and dy | 4 |
| `map_sample_memory` | the node store, inside `map_module` | (1 of the 4) |
| `buffer_read_manager` | turns (x, y, dx, dy) into four memory addresses, two weights and border flags | 1 |
| `pixel_interpolation` | routes memory outputs to the quartet's corners, interpolates, rounds | 3 |
| `bilinear_interpolator` | three-multiplier interpolator, used three times | 2 |
| `distortion_corrector` | the top level | |
| `map_onthefly` | alternative map source: the lens model evaluated per pixel, not used by the top | 8 |

An output pixel is issued together with input pixel (x, y + delay).
It appears on the output ten clocks later: 1 + 4 + 1 + 1 + 3. Shared
constants and the memory-numbering type live in `dc_pkg`.

## The line buffer and its four memories

This is the part that needs the most care.

**Slots.** Input row y is stored in buffer slot `y mod BUF_LINES`. The row
counter and the slot counter run side by side, so no division is ever done.

**Interleave.** A bilinear interpolation needs four pixels: (x0, y0),
(x0+1, y0), (x0, y0+1) and (x0+1, y0+1). They must all be read in the same
clock. So the buffer is split into four memories by the parities of row and
column:

```
row parity 0:   0 1 0 1 0 1 ...
row parity 1:   2 3 2 3 2 3 ...
```

Memory `{row[0], col[0]}` holds the pixel. Any 2x2 quartet has one pixel of
each parity pair, so it touches each memory exactly once. `BUF_LINES` must be
even, so that the slot parity equals the row parity. Inside its memory, a
pixel is at `(slot >> 1) * (IMG_W/2) + (col >> 1)`. Each memory holds
25 x 320 pixels at the defaults.

**Reading a quartet.** The map gives a relative displacement. So the read
side works from the output row's own slot:

```
slot(y0) = (slot(y) + floor(dy)) mod BUF_LINES
```

The result needs only one add and one wrap. For each memory, the read manager
picks the quartet column and the quartet row that have that memory's parity.
It then forms that memory's address. It passes the parities of (x0, y0) on.
With them, `pixel_interpolation` knows that corner (i, j) comes from memory
`{y0[0]^i, x0[0]^j}`.

**Which rows are safe.** Output row y is issued while input row
y + delay is being written. That input row overwrites the slot of row
y + delay - `BUF_LINES`. So a quartet is only guaranteed to be in the buffer
if both of its rows lie in

```
[ y + delay - BUF_LINES + 1 ,  y + delay - 1 ]
```

At the defaults (50 lines, delay 25), floor(dy) must lie between -24 and +23.
The buffer read manager checks this for every pixel. A pixel that breaks the
rule is output as the fill value, with `out_window_err` high. A map must
therefore be built so that its vertical displacements stay inside this window.

**Choosing the delay.** The delay is an input, `cfg_delay_lines`, sampled
with each frame sync. It must lie in 2 .. `BUF_LINES`-1. Set it together with
the map. It must be at least the map's largest downward displacement plus two
lines. `BUF_LINES` minus the delay, less one, bounds the upward displacement.
Half the buffer suits a map that is symmetric top to bottom.

## Stream timing

- **Input.** `in_valid` strobes a pixel. `in_sof` is high on the first pixel
  of a frame. Pixels come in raster order, `IMG_W` x `IMG_H` of them, with
  any number of idle clocks in between. Strobes outside a frame are ignored.
- **Output lag.** Output pixel (0, 0) is issued together with input pixel
  (0, delay). After that, one output pixel is issued with each input
  pixel, so the output follows the input's timing, idle clocks included.
- **Flush.** When the input frame ends, `delay` output lines are still
  missing. They are issued at one pixel per clock. The vertical blanking must
  therefore last at least `IMG_W * delay` clocks: 16,000 for 640 columns and
  a 25-line delay. A 525-line VGA timing has 45 blank lines of 800 clocks, which is
  enough.
- **Overrun.** If a frame sync arrives before the flush has finished, the
  unfinished output frame is cut short and `overrun` pulses for one clock.
  Pixels of the cut frame that are already in the pipeline still come out.
  They may be wrong, because the new frame starts overwriting the buffer.
  Output pixel positions come out as `out_x`/`out_y`, and `out_sof`/`out_eol`
  mark the first pixel of a frame and the last pixel of a line.

## The subsampled map

With S = 2^`SUB_LOG2`, nodes sit at pixel positions (S·gx, S·gy). There are
`((IMG_W-1) >> SUB_LOG2) + 2` node columns and `((IMG_H-1) >> SUB_LOG2) + 2`
node rows. The last node lies on or beyond the image border, so every pixel
has four nodes around it. For VGA this gives 81 x 61 = 4941 nodes at 8 px and
21 x 16 = 336 at 32 px.

A node holds the displacement pair (dx, dy) that the full per-pixel map has
at that position. Each value is a 16-bit signed number with 8 fractional bits
(range ±128 px). Host software computes the full map, for instance with
OpenCV's `initUndistortRectifyMap`. It subtracts the pixel's own coordinates
and writes one node per clock through `map_wr_en`, `map_wr_gx`, `map_wr_gy`,
`map_wr_dx`, `map_wr_dy`. Writes take effect at once, so load the map between
frames.

The nodes are stored in four memories, split by node parity in the same way
as the line buffer. The four nodes of a cell are therefore read in one clock.
For pixel (x, y):

```
gx = x >> SUB_LOG2,  fx = x mod S      (same for y)
top = n(gx,gy)*S   + (n(gx+1,gy)   - n(gx,gy))  *fx
bot = n(gx,gy+1)*S + (n(gx+1,gy+1) - n(gx,gy+1))*fx
d   = round_half_up((top*S + (bot - top)*fy) / S^2)      -> 8 fractional bits
```

That is three multipliers per component and six for the map. The same
`bilinear_interpolator` computes the output pixel, with weights from the
fractional part of (dx, dy) in units of 1/256. The result is rounded half up
to 8 bits.

**How coarse the map may be.** Fewer nodes cost accuracy. On a radial
lens model (k1 = 0.12, k2 = 0.05, focal length 500 px, about 40 px of
displacement in the corners) a VGA map gives these errors, measured over
every pixel against the exact per-pixel displacement:

| node spacing | `SUB_LOG2` | nodes | geometric RMSE |
|---|---|---|---|
| 8 px | 3 | 4941 | 0.007 px |
| 32 px | 5 | 336 | 0.11 px |
| 64 px | 6 | 99 | 0.44 px |
| 128 px | 7 | 30 | 1.8 px |

Calibrated maps are usually good to a few tenths of a pixel, so 32 px is
already close to that. The error also grows with the amount of lens distortion.
Changing `SUB_LOG2` resizes the map memory; nothing else in the design
depends on it.

## Computing the map instead of storing it

`map_onthefly` is a second map source with the same output format as
`map_module`. It uses no memory. Instead it evaluates the lens model every
clock, for each output pixel:

```
xn = (x - cx)/fx,   yn = (y - cy)/fy,   r2 = xn^2 + yn^2
kr = 1 + k1 r2 + k2 r2^2 + k3 r2^3
xd = xn kr + 2 p1 xn yn + p2 (r2 + 2 xn^2)
yd = yn kr + p1 (r2 + 2 yn^2) + 2 p2 xn yn
dx = fx xd + cx - x,   dy = fy yd + cy - y
```

All of this is signed fixed point with `FRAC` fractional bits (default 20),
and every product is truncated back to `FRAC` bits. The reciprocals 1/fx and
1/fy come in as configuration, so the block has no divider. Rotation and the
rational terms k4..k6 are left out. The block takes 8 clocks. It is not used
by `distortion_corrector`, which takes its map from `map_module`. Because the
output format is the same, either block can feed the read manager.

The precision decides the accuracy. On a VGA raster with a strong lens
(focal length 500 px, k1 = 0.12, k2 = 0.05, k3 = 0.01, small tangential
terms) the geometric RMSE is 6.3 px at 12 bits, 0.15 px at 16 bits and
0.02 px at 20 bits. Most of the 20-bit error comes from rounding 1/fx.

## Borders

- **Outside the image.** If the source point lies outside
  [0, `IMG_W`-1] x [0, `IMG_H`-1], the output is `FILL_VALUE` (0 by default).
- **Last column or row.** A point exactly on the last column or row is read
  as the pair (`IMG_W`-2, `IMG_W`-1), with weight 256/256 on the second
  pixel. Plain identity maps therefore come out exact, including the last
  column and row.

## Parameters of `distortion_corrector`

| parameter | default | meaning |
|---|---|---|
| `IMG_W`, `IMG_H` | 640, 480 | frame size (even) |
| `BUF_LINES` | 50 | line buffer depth (even) |
| `PIX_W` | 8 | pixel width |
| `SUB_LOG2` | 3 | map node every 2^`SUB_LOG2` pixels |
| `MAP_W`, `MAP_FRAC` | 16, 8 | displacement word width and its fractional bits |
| `FILL_VALUE` | 0 | pixel value used outside the image or the buffer window |

The line delay is not a parameter. It is the input `cfg_delay_lines`
(6 bits at the defaults), described above.

At the defaults, synthesis infers 256,000 bits of line buffer and
162,688 bits of map memory: 4 x 1271 nodes of 32 bits, a little more than the
4941 nodes used.

## Sources of each choice

The published description of the architecture supplies:

- the blocks and their connections;
- the circular buffer of a fixed number of lines;
- the output lag of at least the largest vertical displacement, which depends
  on the map in use;
- relative map coordinates;
- the 2x2 memory interleave;
- map subsampling with bilinear interpolation by three-multiplier
  interpolators;
- the 8-bit fraction of the map samples;
- the VGA / 8 px / 50-line configuration, with its 4941 nodes.
- the on-the-fly alternative: the lens model in fixed point, with the number
  of fractional bits as its main parameter.

Everything below was chosen here:

- the stream signalling;
- the delay value, and setting it at run time per frame;
- the flush at one pixel per clock, and the overrun behaviour;
- the widths of pixels and map words;
- rounding, border and fill rules, and the window check;
- the node-parity split of the map memory;
- the map write port;
- the pipeline depths.

Known departures and open points:

- **Multiplier count.** The text counts six multipliers for the two map
  interpolators, while a bar chart of operator counts shows eight for this
  approach. This design follows the text: six in the map module, three for
  the pixels.
- **Map memory size.** The quoted map storage for 32 px sampling (about
  2.4 kb) does not follow from 336 nodes. Here 336 nodes take 10,752 bits.
- **Resources.** A vendor resource report exists for the original
  (475 LUTs, 525 registers, 16 block RAM tiles, 19 DSPs). It was not
  reproduced, and no timing analysis was done, so the 100 MHz pixel clock is
  not confirmed for this RTL.
- **Host software.** The software that computes and subsamples the map is not
  part of the RTL.
- **On-the-fly map.** `map_onthefly` covers the radial-tangential model
  without rotation or rational terms. So it needs no divider, unlike the
  general model. It is a separate block, not wired into the top level.
- **Full map in external memory.** Storing the per-pixel map whole is another
  alternative. It needs an external memory and is not included.

## Simulation

Each testbench in `tb/` checks its block against a model written separately
inside the testbench. Each ends with a line
`TB_RESULT checks=N failures=M`. With plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl rtl/dc_pkg.sv tb/tb_distortion_corrector.sv \
          --top-module tb_distortion_corrector
./obj_dir/Vtb_distortion_corrector
```

(Add `-Wno-fatal` if lint warnings should not stop the build.)

`tb_distortion_corrector` runs the whole design at its default size for three
frames (about 1 M clocks, a second of simulation). The first two frames use a
25-line delay and the third a 30-line delay:

- a barrel-distortion map with random idle input clocks;
- an identity map with patches that leave the buffer window, and a frame
  whose blanking is too short;
- a third frame started during the flush, which causes an overrun.

It checks every output pixel and its position, the 10-clock latency and the
pixel counts. It also checks that fill, window errors, edge clamping, flush
and overrun all occurred. `tb_sampling_factors` builds the map module at 8, 32, 64 and 128 px node
spacing on the same lens model. It runs a full VGA raster through all four.
It checks each output exactly against the fixed-point formula, and it prints
the RMSE table above. It also checks that the error grows with the spacing.

`tb_map_onthefly` builds `map_onthefly` with 12, 16 and 20 fractional bits.
It checks each output exactly against a 128-bit integer version of the
formula, and it checks the 8-clock latency. It prints the RMSE against the
floating-point model and checks that it falls as the precision grows.

The block testbenches use random stimulus:

- `tb_address_manager` runs at 16x12 with an 8-line buffer and delays of 3,
  5 and 2;
- the others run at the default size.
