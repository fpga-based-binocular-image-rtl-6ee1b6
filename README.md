# Binocular SURF/BRIEF feature extraction and matching in RTL

This design finds feature points in the images of a stereo camera pair and
matches them, at one pixel per clock. The matching works in two directions:

- **stereo matching** pairs each left-image point with a right-image point, which gives its disparity;
- **trace matching** pairs each left-image point with a point of the previous left image, which follows it over time.

Points are detected with the SURF detector: the determinant of a box-filter
Hessian at eight scales, then non-maximal suppression and a threshold. Each
point gets a 128-bit BRIEF descriptor. A match is the candidate at the
smallest Hamming distance, kept only if it passes a distance threshold and,
for stereo, an epipolar/disparity test. At 100 MHz a frame of two 640x480
images takes 614,400 clocks, so the design runs at 162 frames per second.

The RTL follows the architecture of *FPGA-based Binocular Image Feature
Extraction and Matching System* (Ni, Wang, Zhao, Gao): the generic sliding-window
filter structure, the 52x52 / 3x3 / 49x49 windows, eight parallel Hessian
cores, the five-section ring buffer and the four-state matching FSM. That
description leaves many details open: the fixed-point formats, the filter
geometry, the BRIEF pattern, the alignment of the pipeline, the handshakes
and the section sizes. Those are this design's own choices, and the last
section lists them.

## 1. System and data flow

```
 left  DVP ─► dvp_capture ─► cap_l_* ─┐                         (to frame-buffer DMA,
 right DVP ─► dvp_capture ─► cap_r_* ─┘                          DDR, rectification:
                                                                  outside this RTL)
 px_* (rectified: left image, then right image, per frame)
   └─► feature_extractor ──(flag, descriptor, x, y per pixel)──► feature_matcher ─► res_*
          integrator, windows, 8 Hessian cores,                   multi_buffer
          NMS, threshold, flag FIFO, averaging                    match_executor
          filter, BRIEF comparers, coord. generator                 (match cores, checks, Tx FIFO)
```

`binocular_feature_system` is the top. The DMA engines, DDR, image
rectification, the ARM processor and the AXI4-Lite register bank are not part
of the RTL; their connections are plain ports:

- `cap_l_*` / `cap_r_*`: the camera streams towards the frame buffer;
- `px_*`: the rectified pixel stream coming back;
- `res_*`: the match results;
- `hd_thresh`, `y_tol`, `max_disp`: the matcher configuration.

One extractor serves both cameras. Each frame enters it as the left image
followed by the right image, each W x H pixels in raster order, with no gap
marker between them.

## 2. The pixel pipeline and its alignment

This is the least obvious part of the design. Everything in
`feature_extractor` advances on one enable, `en = s_valid && s_ready`. The
pipeline is therefore a fixed number of *enabled steps* long, and it stalls
as a whole when the input has a gap or the matcher holds the output.

**Windows.** `image_window` is an N x N array of registers. Each register
row except the last continues into a line delay of W-N entries, so a row
together with its line delay holds one image line. After pixel k has been
accepted, `win[i][j]` holds pixel `k - i*W - j`: the row index counts lines
back and the column index counts pixels back. A function block reads
any register of the window and nothing else.

**Two paths of different length.** Take a pixel p. The table gives the
number of enabled steps after p has entered at which each stage output
holds p's result:

| stage | holds result of pixel p after |
|---|---|
| integral value `ii` | 0 |
| 52x52 integral window, Hessian centre at (25,25) | 25W+26 |
| Hessian determinant (registered) | 25W+27 |
| 3x3 determinant window, centre (1,1) | 26W+29 |
| NMS + threshold flag (registered) | 26W+30 |
| 9x9 box sum (box at window rows/cols 0..9, centre (4,4), registered) | 4W+6 |
| 49x49 window, centre (24,24) | 28W+31 |
| descriptor (registered) | 28W+32 |

The descriptor path is 2W+2 steps longer than the flag path. The
`flag_delay_fifo` therefore delays the 1-bit flag by 2W+2 steps, which is
cheaper than delaying 128-bit descriptors. The output beat sent together with
input pixel k carries pixel k-(28W+33). `coord_generator` counts 28W+33
accepted pixels before it marks the pipeline primed. From then on it counts
columns and rows of the outgoing pixels and raises `m_last` on the last
pixel of each image.

**Handshake.** Until the pipeline is primed, every input pixel is accepted
and nothing is emitted. After that, `m_valid = s_valid` and
`s_ready = m_ready`, so an input pixel and an output beat always move
together. The results of an image's last 28W+33 pixels come out while the
next image goes in. At the end of a video, 29 rows of any further pixels
flush them out.

**Borders.** Near the border a window straddles two lines or two images. The
flag is forced to 0 within 29 pixels of every image border. Inside that
margin every filter, neighbour and BRIEF sample lies within the image. At
640x480 a key point can lie anywhere in a 582x422 area.

## 3. SURF detection arithmetic

`integrator` keeps a running sum of the current row and a line of the
previous row's integral values. 27 bits hold 255*640*480. Every box sum is
four integral reads combined modulo 2^27. This is exact, because a true box
sum is never negative and always fits.

`hessian_core` (one per scale, L = 9, 15, 21, 27, 33, 39, 45, 51). The lobe
size is l = L/3 and all offsets are from the filter centre:

- **Dyy**: rows -(L-1)/2..(L-1)/2 and columns -(l-1)..(l-1), minus 3 times the middle lobe (rows ±(l-1)/2). This is the +1/-2/+1 filter.
- **Dxx**: the same, transposed.
- **Dxy**: four l x l boxes at ±1..±l, with signs + - - +.

The determinant is `det = Dxx*Dyy - (207/256)*Dxy^2`, which uses ω = 0.9.
It is then multiplied by `round(2^32/L^4)` and shifted to keep 8 fraction
bits. This normalises each response by the filter area, so that different
scales can be compared.

`nms_3d` declares a candidate when the centre is strictly greater than its
26 neighbours at its own scale and the two adjacent ones. Six units cover
scales 2..7. `keypoint_threshold` ORs the candidates whose determinant
exceeds `THRESH` (default 6658, i.e. 0.0004 for images scaled to 0..1).

## 4. BRIEF description

`averaging_filter` forms the 9x9 box sum from four corners of the same
52x52 integral window that the Hessian cores use, with one adder and two
subtractors. It does not divide by 81, because the comparisons give the
same result on sums as on means. The sums fill a 49x49 window.
`brief_descriptor` compares 128 fixed point pairs: bit i is 1 when the first
point's sum is greater than the second point's. The pattern is
`feat_pkg::brief_pattern()`: uniformly distributed offsets in -24..24 from a
32-bit xorshift sequence (shifts 13, 17, 5; seed 1; value mod 49, minus 24).
Changing this function changes every descriptor. Descriptors made with
different patterns cannot be matched against each other.

A feature is a 148-bit `feature_t`: `{desc[127:0], y[9:0], x[9:0]}`.

## 5. Frame schedule and the five-section multi buffer

Matching runs one frame behind extraction. While frame n+1 is being written,
frame n is matched, in two ways:

- stereo: its left features against its right features;
- trace: its left features against the left features of frame n-1.

Three feature sets are read while two are written, so `multi_buffer` has five
sections with rotating roles. With ring base p (mod 5):

| role | WL (write left) | RP (read previous left) | RR (read right) | RL (read left) | WR (write right) |
|---|---|---|---|---|---|
| section | p | p+1 | p+2 | p+3 | p+4 |

`advance` adds 2 to p. The two sections just written become RL and RR, the
old RL becomes RP, and the old RP and RR sections are emptied and
written next. The base runs 0, 2, 4, 1, 3, ...

`feature_matcher` runs this schedule:

1. Flagged pixels are appended to WL, or to WR after the first image-end marker.
2. The second image-end marker closes the frame.
3. The multi buffer rotates once the frame is closed and the executor is idle. Until then the input is held, which suspends the extractor.
4. One clock after the rotation, the executor starts. Trace matching is enabled from the second frame on.

Each section holds 1024 features (`DEPTH`). Further features of an image are
dropped, and the sticky `feat_overflow` is raised.

## 6. Match executor

There are NG groups (default 8). Each group has a trace core and a stereo
core, and both take their A input from the same current-left register.
`match_core` holds a distance register and a coordinate register. They are
loaded when the stored distance is greater than the new one, so ties keep
the earlier candidate. `clear` sets the distance to 255, which means "no
candidate".

The FSM:

- **LOAD**: reads the next NG left features into the A registers (NG+2 clocks). Groups past the end of the list are disabled.
- **RUNNING**: reads RR[j] and RP[j] together for j < max(nR, nP), one per clock. Each is given to every enabled S or T core (n+2 clocks).
- **TRANSPORT**: takes the groups one per clock. It pushes a result into the Tx FIFO (`sync_fifo`) when a match passed, and waits while the FIFO is full (NG+1 clocks).
- **CLEAR**: resets the cores. It then returns to LOAD, or to IDLE when all left features are done.

One pass takes ceil(nL/NG) * (2*NG + max(nR,nP) + 6) clocks, plus any waiting
on a full FIFO. For 1024 features per image that is about 134k clocks,
against the 614k clocks of a frame.

`pair_check` applies these tests:

- **trace** passes if its distance is at most `hd_thresh`;
- **stereo** passes if its distance is at most `hd_thresh`, |y_left - y_right| <= `y_tol`, and 0 <= x_left - x_right <= `max_disp`.

The result word `match_result_t` (72 bits) is
`{t_ok, s_ok, cur, prev, right, disparity}`, where `disparity` is a signed
11-bit value x_left - x_right. A result is written only if at least one of
the two matches passed.

## 7. Capture

`dvp_capture` samples a pixel when `href && pix_en`. It holds each pixel back
by one, so that the last pixel of a line can carry `tlast`. `tuser` marks
the first pixel after a rising edge of `vsync`. A camera cannot be stalled,
so a pixel that finds the output register still full is dropped and sets
`overflow`. `pix_en` is the camera pixel strobe, already brought into the
system clock domain.

## 8. Parameters

| module | parameter | default | note |
|---|---|---|---|
| top, extractor | W, H | 640, 480 | W, H <= 1024 (10-bit coordinates), > 58 |
| top, extractor | THRESH | 6658 | Hessian threshold, 8 fraction bits |
| top, matcher | NG | 8 | match groups |
| top, matcher | DEPTH | 1024 | features per image |
| top, matcher | FIFO_DEP | 16 | Tx FIFO entries |

The window sizes (52, 49, 3), the eight scales and the 128-bit descriptor
are fixed by the structure and are not parameters.

## 9. Departures and choices

Differences from the source description:

- The source lists the scales as 1.2 ... 6.0, 6.4. Scale 6.4 would need a filter of side 48, which is not a valid box-filter size, while a 52x52 window fits exactly L = 51 (scale 6.8). The eighth core uses L = 51.
- The source text says the flag path is the *longer* one but draws the FIFO on the flag path. Here the descriptor path is longer by 2W+2 steps, and the flag FIFO aligns the two, as drawn.
- The "parallax search range" is applied as a check after the search, not as a limit inside the search.

Choices of this design where the source says nothing:

- ω = 0.9, the L^4 normalisation and all fixed-point widths;
- the Hessian threshold value;
- the BRIEF pattern;
- omitting the division by 81 in the averaging filter;
- the 29-pixel border margin;
- the tie rule of the match core;
- the section size (1024), the number of groups (8) and the FIFO depth (16);
- the result word format;
- dropping features when a section is full;
- the DVP conversion details;
- asynchronous-read line delays (the source uses block RAM and FIFOs).

Not included: the image rectification, DMA, DDR, processor and Ethernet, and
a register map for the configuration bus. The source gives none of these.

## 10. Simulation

Every module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line:

- `tb_feature_extractor` runs five 96x72 images against a reference model in the testbench. The model has its own integral image, Hessians, NMS, box sums and comparisons. It checks every flag, every descriptor in the valid area and every coordinate. It also checks the one-pixel-per-clock rate and operation under random gaps and back-pressure.
- `tb_hessian_core` computes the determinants from direct pixel sums.
- `tb_multi_buffer` checks the role rotation against the ring sequence.
- `tb_match_executor` and `tb_feature_matcher` compare complete result streams with a software model of the search and the schedule. `tb_match_executor` also checks the FSM cycle count.
- `tb_binocular_feature_system` (128x96) and `tb_full_system` (all defaults, 640x480) run the whole system end to end on a synthetic scene. The right view is shifted by a known disparity and successive frames by a known motion. At least 90% of the passing stereo matches must show that disparity, and 90% of the trace matches that motion. Both also count input gaps, extractor suspension, result back-pressure, stereo rejections and the DVP capture output. The full-size run takes about a minute of simulation after a one-minute build.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_full_system \
    -y rtl -y tb +libext+.sv -Irtl rtl/feat_pkg.sv tb/tb_full_system.sv
./obj_dir/Vtb_full_system
```

Replace `tb_full_system` with any other testbench name. `feat_pkg` holds
the shared types and constants and must be read first.
