# Fuzzy-enhanced Sobel edge detector for colour images

Plain Sobel edge detection misses edges in low-contrast images: the step
between an object and its background is too small for the gradient to pass
the threshold. This design first stretches the contrast of each colour
channel with a fixed S-shaped curve (a "fuzzy" enhancement that pushes dark
values darker and bright values brighter), then runs a Sobel operator on each
of the R, G and B channels separately, and marks a pixel as an edge when at
least one channel finds an edge there. It processes one RGB pixel per clock,
streaming, with only two image rows of storage per channel.

The architecture follows Zhang, Li and Xiao, *A Digital Fuzzy Edge Detector
for Color Images* (University of Chinese Academy of Sciences, 2017), which
describes an FPGA implementation for 256x256 8-bit RGB images. The RTL here
is a reconstruction from that description; the points where the description
had to be completed are listed in [What is this design's own](#what-is-this-designs-own).

```
            +------------- one pipeline per channel (x3) --------------+
 pix_r ---->| fuzzy_preprocessor -> window_generator -> sobel_operator |--+
 pix_g ---->|   (S-curve LUT)      (2 line FIFOs +      (|Gx|+|Gy| > T) |--+--> rgb_combine --> edge_bit
 pix_b ---->|                       3x3 shift regs)                    |--+     (>= 1 channel)   edge_row/col
            +----------------------------------------------------------+         ch_edge[2:0]
```

## Files

| file | contents |
|---|---|
| `rtl/fuzzy_edge_pkg.sv` | pixel, window and gradient types; `PIX_W` = 8, `GRAD_W` = 11 |
| `rtl/fuzzy_preprocessor.sv` | contrast curve as a ROM computed at elaboration, with bypass |
| `rtl/line_fifo.sv` | RAM row buffer, fixed delay of `DEPTH` shifts |
| `rtl/window_generator.sv` | 3x3 window from the pixel stream, border masking, centre position |
| `rtl/sobel_operator.sv` | gradient and threshold decision, shared-sum or direct form |
| `rtl/rgb_combine.sv` | OR of the three channel decisions |
| `rtl/fuzzy_edge_detector.sv` | top level: three channel pipelines and the combine |
| `tb/fuzzy_ref_pkg.sv` | independent reference models (floating-point curve, mask-based Sobel) |
| `tb/tb_*.sv` | one self-checking testbench per module |

## The contrast curve

Every 8-bit channel value `x` is replaced by

    f(x) = -2.0454098505641e-7 x^4 + 7.615967514125e-5 x^3 - 0.0041249658333 x^2 + 0.4911541875107 x

which passes through (0, 0) and (255, 255) and is steepest in the middle
(slope about 1.46 at x = 128), so mid-grey steps grow by roughly half while
the ends of the range are compressed. Some points of the curve as the
hardware produces them:

| x    | 0 | 32 | 64 | 96 | 128 | 160 | 192 | 224 | 255 |
|------|---|----|----|----|-----|-----|-----|-----|-----|
| f(x) | 0 | 14 | 31 | 59 | 100 | 151 | 203 | 244 | 255 |

The curve does not depend on the image. The source paper discusses a
per-image threshold from Otsu's method as a basis for membership functions,
but this particular polynomial ignores it, and Otsu's method ran as software
there; there is no Otsu hardware in this design.

In hardware the curve is a 256 x 8 ROM. Its contents are computed by a
constant function when the design is elaborated: the four coefficients are
held as integers scaled by 2^48, the polynomial is evaluated in Horner form
in 64-bit arithmetic, and the result is rounded to the nearest integer. The
curve rises slightly above 255 (to 256.04 near x = 250), so results are
clamped to 255; that makes the top few entries 255 rather than a strictly
monotonic curve. The fixed-point ROM equals the floating-point curve, rounded
and clamped, for all 256 inputs.

`fuzzy_en = 0` bypasses the ROM. That gives the plain Sobel detector on the
same hardware, the baseline the enhancement is compared with.

## Building 3x3 windows from a stream

Pixels arrive in raster order, one per clock with `pix_valid`. The window
generator holds the window in nine 8-bit registers P1..P9 in three chains of
three, linked by two row buffers (`line_fifo`):

```
 in --> P1 -> P2 -> P3 --> FIFO (W-3) --> P4 -> P5 -> P6 --> FIFO (W-3) --> P7 -> P8 -> P9
```

Each chain plus its FIFO delays by exactly W = `IMG_W` pixels (3 registers +
W - 3 FIFO entries, 3 + 253 = 256 for the default width), so P4 is the pixel
directly above P1 and P7 the one above P4. With the newest pixel at row r,
column c:

| | column c | c-1 | c-2 |
|---|---|---|---|
| row r   | P1 | P2 | P3 |
| row r-1 | P4 | P5 | P6 |
| row r-2 | P7 | P8 | P9 |

P5 is the centre, the pixel whose edge bit is computed. The FIFOs are RAMs
that are always full: each shift reads the entry at the pointer and writes the
new value to the same address, so no read/write arbitration is needed.

Everything advances only on an input strobe; a clock without `pix_valid`
moves nothing. Row and column counters track the newest pixel. A window is
flagged valid only when it lies wholly inside the image (r >= 2 and c >= 2);
windows that straddle the end of one row and the start of the next, or
reach back into the previous frame, are dropped. The edge map therefore
covers the (W-2) x (H-2) interior, 254 x 254 pixels by default. Frames can
follow each other without a gap: the counters wrap after W x H pixels, and
the masking hides whatever the FIFOs still hold from the previous frame.

## Sobel operator with shared sums

The two gradients of the window are

    Gx = (P1 + 2 P2 + P3) - (P7 + 2 P8 + P9)      rows r and r-2
    Gy = (P1 + 2 P4 + P7) - (P3 + 2 P6 + P9)      columns c and c-2

and the pixel is an edge when `|Gx| + |Gy| > threshold` (the L1 norm stands
in for the square root; the comparison is strict). Evaluated directly this
takes a dozen or more additions per pixel. Because the window only ever moves
one column to the right, most of that work was already done for the two
previous windows. The default form (`REUSE_SUMS = 1`) keeps those results in
registers and does seven additions or subtractions per pixel, all on the
newest column P1, P4, P7:

| step | operation | meaning |
|---|---|---|
| 1 | `d = P1 - P7` | vertical difference of the new column |
| 2 | `ns = d + d'` | neighbouring sum with the previous column's `d'` |
| 3 | `Gx = ns + ns'` | partial sum: `d + 2 d' + d''` = Gx |
| 4 | `nsa = P1 + P4` | neighbouring sum down the new column |
| 5 | `nsb = P4 + P7` | neighbouring sum down the new column |
| 6 | `ps = nsa + nsb` | partial sum `P1 + 2 P4 + P7` |
| 7 | `Gy = ps - ps''` | interlaced difference with the partial sum from two shifts ago |

(`'` is the value kept from the previous shift, `''` from two shifts ago.)
Step 3 is right because `d'` is `P2 - P8` and `d''` is `P3 - P9` of the
current window; step 7 because `ps''` is `P3 + 2 P6 + P9`. The stored terms
advance on every window shift, valid or not, so they are correct whenever the
two previous shifts were the two previous columns of the same three rows.
That is true for every window the generator flags valid (c >= 2 means the
previous two pixels of the stream were columns c-1 and c-2 of the same row),
including after input stalls, since a stall shifts neither the window nor the
stored terms.

The six other window entries are not read in this form; they exist for the
direct form (`REUSE_SUMS = 0`), which evaluates the formulas above from all
nine entries. The two forms give identical results and the testbench runs
them side by side.

Value ranges: `d` is +-255, `Gx` and `Gy` are +-1020, and `|Gx| + |Gy|` is at
most 1530 for 8-bit data (2040 would need a window that is both a full
vertical and a full horizontal step, which its corners forbid). The
threshold input and the `grad` output are 11 bits.

## Combining the channels

`rgb_combine` ORs the three channel decisions: an edge in any one colour
channel is an edge of the image. This catches boundaries between regions
that differ in one colour but have similar brightness.

## Interface and timing of the top level

`fuzzy_edge_detector` (parameters `IMG_W` = 256, `IMG_H` = 256,
`REUSE_SUMS` = 1):

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `fuzzy_en` | in | 1 | 1 = contrast curve applied, 0 = raw values |
| `threshold` | in | 11 | Sobel threshold T (400 in the original experiments) |
| `pix_valid` | in | 1 | qualifies `pix_r`, `pix_g`, `pix_b` |
| `pix_r`, `pix_g`, `pix_b` | in | 8 each | RGB pixel, raster order |
| `edge_valid` | out | 1 | one edge-map pixel is present |
| `edge_bit` | out | 1 | combined edge decision |
| `ch_edge` | out | 3 | per-channel decisions, [0] = R, [1] = G, [2] = B |
| `edge_row`, `edge_col` | out | 8 each | position of that edge-map pixel (1..254) |

Pipeline: contrast ROM, window registers, Sobel decision and combine are one
register stage each. The edge bit for pixel (r, c) completes once pixel
(r+1, c+1) has arrived and appears on the outputs 4 clocks after that pixel
was presented, whatever the gaps in `pix_valid`. Throughput is one pixel per
clock. `fuzzy_en` acts on pixels as they enter, so it can change between
frames with no idle time; `threshold` acts 2 clocks later, so changing it
mid-stream affects the last few pixels of the previous frame unless the input
pauses briefly.

Storage per default instance: 6 line FIFOs of 253 x 8 bits (12,144 bits) and
3 ROMs of 256 x 8 bits (6,144 bits), plus about 420 flip-flops.

## What is this design's own

The source describes the block structure, the curve, the window generator
(shift registers and two 253 x 8 RAM FIFOs), the Sobel masks, the shared-sum
idea and the threshold; the following it leaves open, and these choices
were made here:

- **Border handling.** Not described. Windows that cross the image border
  are dropped, so the edge map is 254 x 254, with its position on the
  outputs.
- **Handshake.** A single `pix_valid` strobe, no back-pressure; the source
  only says that one pixel arrives per clock.
- **Pipeline registers** after each stage, and the resulting 4-clock latency.
- **Clamping** of the curve to 255, and round-to-nearest.
- **The bypass input** `fuzzy_en`. The source ran its detector with and
  without enhancement but does not say how it switched.
- **The exact grouping of the seven operations.** The source defines
  neighbouring sums, partial sums and interlaced differences and counts seven
  sums per pixel, without spelling out the dataflow; the table above is one
  grouping that meets that count.
- **Obvious slips in the source text, resolved:** its first Sobel mask prints
  a top row of `-1 -2 1` where its own formula uses `-1 -2 -1`; it calls the
  shift registers "3-bit" and the FIFOs "253 x 3" where the block diagram and
  the rest of the text give 8-bit data. The 8-bit, `-1 -2 -1` readings are
  used.

Not built: the image sensor (an OV9650-class camera in RGB mode is assumed as
the source), Otsu's threshold method (software in the source, and unused by
the fixed curve), the storage of the output image, and the memristor-based
detector the source discusses only as future work.

## Verification

Concurrent assertions in the RTL check that the three channel pipelines
stay in lock step and that the window generator shifts exactly once per
input strobe and only flags freshly shifted windows; Verilator evaluates
them with `--assert`.

Each module has a self-checking testbench that compares its outputs with
values worked out independently in the testbench and prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_fuzzy_preprocessor` | all 256 inputs with the curve on and off, against the floating-point polynomial; random input gaps |
| `tb_line_fifo` | full 253-entry depth, random data and shift gaps, output = value written 253 shifts earlier |
| `tb_window_generator` | 10 x 7 frames, back to back with gaps: all nine entries of every valid window, its centre, the count of valid windows, no window on the border |
| `tb_sobel_operator` | both forms side by side on sliding strips; random, flat, full-step and corner patterns (gradients 0 to 1530); thresholds including 400 and exactly equal to the gradient |
| `tb_rgb_combine` | all eight channel combinations, hold when idle |
| `tb_fuzzy_edge_detector` | full 256 x 256 design, four frames (below) |

The end-to-end test streams a synthetic low-contrast colour scene (shaded
background, a rectangle that is strong in R and weak in G, a disc strong in B
only, a bar present in all channels, a little noise) through four frames:
curve on with T = 400; the same scene with the curve off; a new scene with
random input stalls; and a threshold of 250. Every edge-map pixel is checked
(position, three channel bits, combined bit, 4-clock latency). It also counts
how often each mechanism occurred and fails if one never did: enhancement on
and off, input stalls, back-to-back frames, single- and multi-channel edges,
a threshold change, and edges that only the enhanced image shows (several
hundred in the test scene, which is the effect the enhancement is meant to
have). The original test photograph is not included; the scene is generated
by the testbench. The whole run takes about a second.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/fuzzy_edge_pkg.sv tb/fuzzy_ref_pkg.sv tb/tb_fuzzy_edge_detector.sv \
    --top-module tb_fuzzy_edge_detector
./obj_dir/Vtb_fuzzy_edge_detector
```

Replace the testbench name for the others. The packages must come first on
the command line; Verilator finds the modules through `-y`.

## Changing it

- **Image size:** `IMG_W` and `IMG_H` on the top. The FIFO depth follows as
  `IMG_W - 3`, and the counter widths as `$clog2` of the sizes.
- **Another curve:** replace the coefficients `C1`..`C4` (times 2^48) in
  `fuzzy_preprocessor`, or the body of `build_lut`; any function of one 8-bit
  value fits the ROM. The reference in `tb/fuzzy_ref_pkg.sv` must change with
  it.
- **Direct Sobel:** `REUSE_SUMS = 0`, if the window may not move one column at
  a time.
- The line FIFO contents are not reset; that is harmless because the window
  generator never flags a window that reads them before they are written.
