# Streaming ORB feature extractor for SoC FPGAs

This is synthesizable SystemVerilog for an accelerator that computes ORB
features (oriented FAST keypoints with rotated BRIEF descriptors) on a camera
frame while the frame streams past. It is meant for the programmable logic of
a Zynq-class SoC that runs visual SLAM in software. Pixels arrive once, in
raster order, one per clock. The four levels of the image pyramid are made on
the fly by chained down-scalers and processed in parallel. No frame is ever
stored: each stage keeps only as many image rows as its window needs. For each
accepted keypoint the accelerator sends a 320-bit record back to the
processor. The record holds the 256-bit descriptor, the position, the pyramid
level, the quantised orientation and the corner score. A brute-force Hamming
matcher can compare the outgoing descriptors with a set of reference
descriptors that the processor loads.

At 640x480 and 150 MHz a frame takes about 307,200 cycles, roughly 2 ms. The
pipeline latency after the last pixel is a few dozen cycles, plus the 259
cycles of the last descriptor.

## Data path

```
 AXI-Stream pixels ─► input FIFO ─┬─────────────────────────► orb_level L0 ─┐
                                  └► image_scaler ─┬────────► orb_level L1 ─┤
                                                   └► image_scaler ─┬► L2 ──┤ collector
                                                                    └► scaler ► L3 ─┤ ─► descriptor FIFO ─► AXI-Stream records
                                                                                         │
                                                                                         └► hamming_matcher ─► match records
 orb_level:
   8-bit pixel ─► fast_detector ─► keypoint FIFO ───────────────┐
            └─► top 6 bits ─► gaussian_filter ─► 37-row line buffer
                              ┌──────────────────────┘        │
                              ▼                               ▼
                         orientation ─► keypoint_matcher ─► brief_arbiter
                              │ (quadrant, sector)        │ start
                              ▼                           ▼
                         sincos_lut ─────────────► NUNITS × brief_unit ─► records
```

The files `rtl/<name>.sv` hold one module each. `orb_pkg` holds the shared
types (`tag_t`, `kp_t`, `desc_rec_t`, `match_rec_t`), the size functions and
the constant tables. `orb_top` is the top.

## Pixel stream, coordinate tags and the frame-end flush

Each level has one step enable, `en`. It is high when the level gets a pixel.
Every register stage of the level advances only on `en`, so gaps in the input
stream just freeze the pipeline. Next to the data, each stage carries a tag:
the valid bit, the frame parity, and the row and column. A stage that looks
at a window centred *k* pixels behind the newest one steps the tag back along
the raster order with `center_of()`. The result always names the pixel it
belongs to. Keypoints, orientations and descriptors are therefore matched by
coordinate, not by counting latency.

Because a stage only moves when a pixel arrives, the results for the last
rows of a frame would wait for the next frame. To avoid this, each level
issues up to `FLUSH` (16) empty steps after the last pixel of a frame. These
steps carry an invalid tag. A new pixel cancels the flush, because real
pixels drain the pipeline just as well. The frame-parity bit keeps keypoints
of the next frame from matching orientation results of the current one.

`orb_top` counts pixels and checks `s_axis_tlast` against the frame size. A
mismatch sets the sticky `frame_err` flag.

## Image pyramid: the 5/6 bilinear scaler

Each pyramid level is the previous one scaled by 5/6 (a factor of 1.2). The
scaler keeps one line of history and a 2x2 window. Two phase counters, `x6`
and `y6`, count 0..5 along the row and the column. The output sample lies at
(x + x6/5, y + y6/5). It is the weighted sum

    (5-x6)(5-y6)·P(x,y) + x6(5-y6)·P(x+1,y) + (5-x6)y6·P(x,y+1) + x6·y6·P(x+1,y+1)

divided by 25, with rounding. When `x6` or `y6` is 5, the sample would land
on the next input pixel, so no output is produced. Six input pixels thus give
five output pixels, and every sixth input row gives no output at all. The
next level sees these gaps as idle cycles. The level sizes are `scaled_len(n) =
((n-1)/6)*5 + min((n-1) mod 6, 5)`, which gives 640x480, 533x400, 444x333
and 370x277.

## FAST corners and non-maximum suppression (`fast_detector`)

FAST works on the full 8-bit pixels. A 7-row line buffer and a 7x7 window
give the 16 pixels of the radius-3 Bresenham circle. Stage 1 compares each
circle pixel with the centre ± `TH`. This gives a "brighter" vector and a
"darker" vector, and the score is the sum of absolute differences over the
circle. Stage 2 tests the vectors against the sixteen masks of 9 contiguous
pixels. A pixel that passes keeps its score; every other pixel gets score 0.

The scores go through a 3-row line buffer and a 3x3 window. The centre is a
keypoint if:
- its score is non-zero;
- it is strictly greater than the row above and the left neighbour;
- it is at least equal to the right neighbour and the row below.

Of two equal neighbouring scores, the one seen first in raster order
survives. Keypoints closer than `EDGE` (21) pixels to the border are
discarded. That margin is 18 for the 37x37 BRIEF and orientation window plus
3 for the 7x7 Gaussian, so every later window lies fully inside the image.

Keypoints are written to the keypoint FIFO (`KP_DEPTH` = 128). They must wait
there for the orientation window, which trails the FAST window by about 17
rows. When the FIFO is full, new keypoints are lost (`st_kp_overflow`).

## 6-bit pixels and the Gaussian filter

After FAST, only the top 6 bits of each pixel are used. The smoothing filter
is a 7x7 binomial kernel: the outer product of (1 6 15 20 15 6 1) with
itself, divided by 4096, with rounding. Its output is tagged with the centre
pixel. It fills a 37-row line buffer (36 stored rows plus the incoming one).
Both the orientation module and the BRIEF modules read that buffer.

## Orientation from running moments (`orientation`)

The orientation of a keypoint is the direction of the intensity centroid of
the 37x37 patch around it. The centroid is given by the moments m10 = Σ x·I
and m01 = Σ y·I. The module never adds up a whole patch. It slides the window
one column per step and updates the moments from the column that enters
(C_in) and the column that leaves (C_out, the entering column delayed by 37
steps):

| quantity | update per step |
|---|---|
| S(C) | sum of the 37 pixels of a column |
| Y(C) | Σ y·I over the column, y = −18..18 |
| m00 | m00 + S(C_in) − S(C_out) |
| m01 | m01 + Y(C_in) − Y(C_out) |
| m10 | m10 − 18·S(C_in) − 19·S(C_out) + m00(old) |

The m10 recurrence counts columns from the incoming side. The new column sits
at −18, every column already in the window moves one place (hence + m00), and
the leaving column was at +18 before the move (hence −19). With this
convention m10 is the *negative* of the moment along the image x axis. The
module negates it before the angle stage, so the quadrant refers to ordinary
image axes. The column delay lines are 37 entries of the column sum and the
column y-moment. No second line buffer is needed.

The angle is not computed as a number. The quadrant comes from the signs of
(mx, my), encoded `{mx < 0, my < 0}`. Inside a quadrant the angle
α = atan(|my|/|mx|) runs from 0 to 90 degrees, measured from the x axis.
Each quadrant has `SPQ` sectors (16, so 64 in total). Sector k is
represented by one line at angle (k+0.5)·90/SPQ degrees. An angle below line
k satisfies |mx|·tan(line k) > |my|. The tangents are constants in Q.8
(`tan_q`), so each line costs one constant multiply and one comparator. A
priority encoder picks the first line whose test holds. The angle is
therefore rounded *up* to the next sector line, and that line's angle is the
one used for rotation. Angles beyond the last line (87.2 degrees for 16
sectors per quadrant) go to the last sector. For `SPQ` = 4 the constants are 0.1875,
0.65625, 1.5 and 5, which shifts and adds can form; for 8 and 16 they are
round(256·tan) of the line angles.

The result appears 4 steps after the window's newest pixel. Its tag names the
window centre.

## Sector to rotation: `sincos_lut`

The LUT holds one shared table per level. For the angle of the sector line it
gives |cos| and |sin| as unsigned 8-bit Q.8 values, saturated at 255. The
quadrant then sets the signs. The table is read once per dispatched keypoint,
and the values are handed to the BRIEF module with the start pulse.

## BRIEF modules: dispatch, alignment and timing

Each orientation result is compared with the head of the keypoint FIFO by
`keypoint_matcher`. The two match when the coordinates and the frame parity
are equal. A FIFO head that the raster scan has already passed is popped as
stale. In a correct pipeline this never happens; the case is counted
(`st_kp_stale`). On a match, `brief_arbiter` starts the lowest-numbered
`brief_unit` that is ready. If all `NUNITS` (4) are busy, the keypoint is
dropped (`st_brief_drop`).

Every BRIEF module owns a 37x37 window of 6-bit pixels. While it is ready,
the window slides with the stream. Its input column is delayed by 3 steps, so
that at the start pulse the window is centred on the keypoint the orientation
module just reported. The start pulse freezes the window.

A descriptor is then built as follows:

1. **Rotate.** Pattern pair *i* is rotated, one pair (two points) per cycle.
   The rotation is x' = c·x − s·y, y' = s·x + c·y. The result is rounded
   half-up and clamped to ±18.
2. **Look up.** One cycle later, both rotated points are looked up in the
   frozen window.
3. **Set the bit.** One cycle after the look-up, bit *i* = I(A) > I(B).

A descriptor thus takes NPAIRS + 3 = 259 cycles from start to `desc_valid`.
The record is held until the collector accepts it. The window must then
reload over 37 stream steps before the module is ready again. With four
modules, a level can keep up with one keypoint every ~74 pixels on average.

The 256 point pairs lie in a 27x27 patch (coordinates −13..13). Rotation
widens the reach to the 37x37 window. The pattern comes from `brief_pattern()`
in `orb_pkg`. It is a fixed xorshift32 sequence (seed 0x2545F491, coordinate
= r mod 27 − 13), computed at elaboration. A different pattern, for example
the usual learned ORB pattern, can replace that function without other
changes.

## Output records and the collector

`desc_rec_t` is 320 bits, listed from the most significant end:

| bits | field |
|---|---|
| 319:64 | descriptor (bit *i* of the field = pair *i*) |
| 63:42 | reserved, 0 |
| 41:40 | level |
| 39:38 | quadrant `{x<0, y<0}` |
| 37:32 | sector within the quadrant |
| 31:20 | FAST score |
| 19:10 | y, in the level's own coordinates |
| 9:0 | x, in the level's own coordinates |

A collector takes at most one
finished descriptor per cycle, with fixed priority: lowest level first, then
lowest unit. It pushes the descriptor into the descriptor FIFO (`DESC_DEPTH` =
16), which drives the AXI-Stream master with `tlast` on every beat. When the
FIFO is full, finished modules simply hold their records
(`st_desc_backpressure`). Nothing is lost at this point. The input side never
back-pressures in normal operation, because the pipeline never stalls.

## Feature matcher (`hamming_matcher`)

The processor writes up to `NREF` (64) reference descriptors and their count
through a memory write port. Every record that leaves on the descriptor
stream is also offered to the matcher. If the matcher is idle, it XORs the
query with one reference per cycle, counts the ones and keeps the nearest
reference (lowest index on ties). A query with a best distance of at most
`MATCH_TH` (50) produces a 39-bit match record: y, x, level, reference index
and distance. The record goes into a result FIFO (`RES_DEPTH` = 64), which
the processor reads through a valid/ready port. A query takes `ref_n` + 1
cycles. Records that arrive while the matcher is busy are not matched
(`st_match_skip`). This is a plain nearest-neighbour search. It does not sort
keypoints by score, it does not evict old map points to memory, and it does
not hold results until the end of the frame.

## Parameters of `orb_top`

| parameter | default | meaning |
|---|---|---|
| IMG_W, IMG_H | 640, 480 | level-0 frame size (up to 1024 per side) |
| LEVELS | 4 | pyramid levels, scale 5/6 between levels |
| NUNITS | 4 | BRIEF modules per level |
| IN_DEPTH, KP_DEPTH, DESC_DEPTH | 64, 128, 16 | FIFO depths |
| FAST_TH | 20 | FAST intensity threshold |
| SPQ | 16 | orientation sectors per quadrant (4, 8 or 16) |
| NP | 256 | descriptor length (pattern pairs) |
| NREF, MATCH_TH, RES_DEPTH | 64, 50, 64 | matcher size, threshold, result FIFO |

The pixel width inside a level (6 bits after FAST) and the window size (37)
are fixed in `orb_level`.

## Verification

Every module has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. The pipeline testbenches
compare against `orb_ref_pkg`, a behavioural reference written independently
of the RTL structure. It works on whole images held in arrays and computes
the scaler, FAST score, NMS, Gaussian, direct (non-recursive) moments with
sector search, the rotated pattern lookup and the full descriptor of each
level. Descriptors must match bit for bit.

- `tb_orb_level`: one 96x80 level, two frames, every descriptor exact. Every
  keypoint is either output or reported as dropped.
- `tb_orb_level_spq4`: the same test with 4 sectors per quadrant, where the
  orientation uses the shift-add tangents. `tb_orientation` and
  `tb_sincos_lut` check 4, 8 and 16 sectors per quadrant against the
  reference.
- `tb_orb_top`: four levels at 128x96, run with small FIFOs and two BRIEF
  modules per level, so that each mechanism happens. The test fails unless
  it sees all of these: BRIEF drops, keypoint FIFO overflow, flushes in every
  level, dispatch in every level, descriptor back-pressure, scaler gaps,
  matcher matches, matcher rejections, result-buffer overflow and
  matcher-busy skips.
- `tb_orb_full`: a full 640x480 frame at the default parameters. All outputs
  are checked against the reference. It takes about a minute and a half of
  simulation.

The test image is synthetic: random bright and dark squares on a gradient.
It produces many more corners than a natural 640x480 frame. Level 0 finds
about 5,900 keypoints there, and most of the losses come from the keypoint
FIFO and busy BRIEF modules. Natural images have far fewer corners per row.

Run a testbench with plain verilator from the repository root, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/orb_pkg.sv tb/orb_ref_pkg.sv \
          tb/tb_orb_top.sv --top-module tb_orb_top -j 8
./obj_dir/Vtb_orb_top
```

Module files are found through `-Irtl` (they are named after their modules);
testbenches that use no reference model do not need `tb/orb_ref_pkg.sv`.

## Departures from the published design and known limits

- **BRIEF pattern.** The original design uses the standard ORB pattern,
  limited to a 27x27 patch. Here the pattern is generated. Descriptors are
  therefore not interchangeable with those of ORB-SLAM's software.
- **Sector tangents.** The constants for 64 sectors are computed here. Only
  the 16-sector set matches published shift-add values.
- **Assumed sizes.** These were chosen for this implementation: the FAST
  threshold, the border margin, the number of BRIEF modules per level, all
  FIFO depths, the flush length, the matcher size and its threshold.
- **Matcher threshold.** The matcher counts a match when the distance is *at
  most* the threshold, which is the usual sense for descriptor distances.
- **No keypoint heap.** There is no score-sorted keypoint heap in front of
  the matcher.
- **Scaler weights.** How the four bilinear weights map onto the 2x2 window,
  and the rounding in the scaler, Gaussian and rotator, are choices made
  here.
- **Lost keypoints.** Keypoints can be lost in three ways: FIFO overflow,
  busy BRIEF modules, or, at the output of the matcher, a full result FIFO.
  All three are counted on status outputs and are not errors.
- **Timing closure.** The design has not been placed and routed. The
  150 MHz target is not verified, and neither is the resource use. The BRIEF
  windows are flip-flop arrays: 4 levels × 4 modules × 37 × 37 × 6 bits,
  about 131 k flip-flops. This is the dominant cost. Fewer modules on the
  smaller levels would reduce it.
- **Reset.** Line buffers, the BRIEF windows and the matcher's reference
  memory have no reset. Their contents are don't-care until overwritten: a
  BRIEF module refills its whole window before it reports ready. The rest
  resets asynchronously on `rst_n`. The same reset also disables the
  assertions, which is why lint reports `rst_n` as both synchronous and
  asynchronous.
- **Resolution.** The frame size is fixed when the design is built
  (`IMG_W`, `IMG_H`, at most 1024 per side). Changing it at run time is not
  supported.
