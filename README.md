# Window-based real-time skin detector

This design finds skin pixels in a live 640x480 colour video stream. Its job is
to shrink the search area for a face or fatigue detector that runs after it.
It avoids running an expensive per-pixel classifier over the whole frame. It
works in two levels:

1. **A cheap streaming pre-processor.** It looks at every pixel once, as it
   arrives from the camera. It tags each pixel with a coarse three-level
   ("ternary") skin class, a motion bit and an edge bit.
2. **An accurate local segmentation.** It runs only on the small windows
   whose ternary content looks like skin. In a typical frame only about a
   fifth of the windows survive. A seed of near-certain skin pixels is grown
   twice by diffusion inside each such window, and the result is filtered by
   a Bayesian test.

The window work is spread over eight identical *skin cores*. A *control core*
hands them windows. The frame itself lives in external memory between the two
levels.

```
camera RGB ──► preprocessor ──► {addr, 52-bit word} ──► external memory
                 ▲  (YCbCr, ternary, motion, edge)            │   ▲
 previous frame ─┘                                            │   │ 25-bit results
                                                              ▼   │
      control_core ──► skin_core x N_CORES ◄── skin_histogram (shared LUT)
```

## Pixel tags: the 52-bit word

Every pixel is stored as `skin_pkg::pix_word_t`:

| bits  | field | meaning |
|-------|-------|---------|
| 51:28 | r,g,b | camera colour |
| 27:4  | y,cb,cr | BT.601 full-range YCbCr, 8-bit fixed point (`color_space_conv`) |
| 3:2   | tern  | ternary class: 2'b11 white = T1, 2'b10 gray = T2, 2'b00 black = T3 |
| 1     | amb   | *ambulant*: luma changed by more than `th_motion` since the previous frame, and not black |
| 0     | edg   | edge: \|dY/dx\| + \|dY/dy\| > `th_edge1` (previous pixel and pixel above) |

The source architecture fixes the totals: 24 colour bits plus 28 tag bits, 52
in all. The order of the fields is this design's own.

**Ternary classes.** Offline, three 2-D heat maps of skin colours are built:
(Cb,Y), (Cr,Y) and (Cr,Cb). Each map gets two polygons:
- an inner one around the frequent skin colours;
- an outer one around every colour ever seen on skin.

A pixel is **white** if it lies inside all three inner polygons. It is
**gray** if it is not white but lies inside all three outer polygons. Every
other pixel is **black**. In `ternary_conv` each polygon is a set of
`N_EDGES=6` half-planes `a*u + b*v + c >= 0`, held in a 36-word coefficient
memory. The polygons must therefore be convex. An all-zero half-plane counts
as unused.

## Windows and the two passes of the control core

Windows are 8x8 pixels and step by 4 pixels in both directions. A 640x480
frame has 159 x 119 = 18921 of them. The algorithm section of the source uses
16x16 windows, but its hardware description uses 8x8 with step 4, and this
RTL follows the hardware.

The pre-processor raises `frame_done` when the last word of a frame is out.
The control core then makes two passes over the windows:

- **Pass 1, classify.** Each window goes to a free core in `mode 0`.
  1. The core refines the ternary window with `neighbour_seg`. Each non-white
     pixel of the 4x4 centre is scored with `xi = K*(2*w3 + g3) + (2*w5 + g5)`,
     where w/g count the white/gray pixels in its 3x3 and 5x5 neighbourhoods.
  2. `xi < th1` makes the pixel black and `xi > th2` makes it white.
  3. `window_classifier` then keeps the window when it has at least one
     white pixel, at least `min_white` white pixels and at least `min_gray`
     gray pixels.

  The core returns that one bit. The control core stores it in a
  candidate map.
- **Morphology.** A non-candidate window whose four direct neighbours
  (left, right, above, below) are all candidates is *annexed*. This restores
  eyes and glasses inside a face.
- **Pass 2, segment.** Each candidate or annexed window goes to a free core
  in `mode 1`.

Only the 4x4 centre of each window gets a neighbour score, because only that
part has a full 5x5 neighbourhood inside the window. With a step of 4 the
centres tile the frame, so every interior pixel is scored exactly once.

A frame that finishes storing while pass 2 of the previous frame is still
running is not segmented. `overrun` pulses for one clock instead.

## Segmenting one window (skin_core, mode 1)

This is the heart of the design. Each step is a separate module. The core's
state machine is `LOAD → FEAT → DIFF1 → DIFF2 → WRITE`.

1. **Load.** The core fetches the 64 tagged words. With each word it also
   gets the previous frame's 25-bit result word for the same pixel. That
   word's `fd1` bit says whether the pixel was in the previous frame's
   first-diffusion set.
2. **Features, in parallel.**
   - Three `otsu_threshold` units split Y, Cb and Cr each into three
     homogeneity classes.
   - Meanwhile the shared `skin_histogram` returns P(skin) and P(non-skin)
     for each pixel.

   **Otsu** works on 16 bins (value >> 4). It tries all 105 threshold pairs,
   one per clock. It keeps the pair that maximises `Σ S_k² / W_k`, where W_k
   is a class's pixel count and S_k its sum of bin indices. With the mean
   fixed, this is equivalent to maximising the between-class variance. Pairs
   are compared by cross-multiplying, so no divider is needed.

   The **histogram** is indexed by `{R[7:4], G[7:4], B[7:4]}`, which gives
   4096 words of 12 bits: `{P(skin), P(non-skin)}`, 6 bits each. It has one
   synchronous read port per core.
3. **Seed** (`seed_gen`). A pixel is a seed when `P(skin) >= th_pure` and
   `16*P(skin) >= theta*P(non-skin)`. The threshold `theta` is:
   - `theta_amb` (lenient) for an ambulant pixel;
   - `theta_fb` for a pixel that was in the previous frame's first diffusion;
   - `theta_hi` (strict) for any other pixel.

   Motion and frame-to-frame feedback thus make the seed less conservative
   where a person is likely to be.
4. **First diffusion** (`first_diffusion`). A pixel joins the set when all
   of these hold:
   - it is not an edge pixel;
   - one of its 8 neighbours is already in the set;
   - the summed class distance `Σ|class(x) − class(master)|` over Y, Cb and Cr
     is at most `d1_th`, or the weaker `d1_th_amb` if the pixel is ambulant.

   The core repeats this step until the set stops growing, at most 64 steps.
   The final set is also what is fed back to the next frame.
5. **Second diffusion** (`second_diffusion`). A single pass from the
   first-diffusion set. Each outside pixel with a set pixel within two pixels
   (its nearest *master*) is scored
   `F = w1*f1 + w2*f2 + w3*f3 + w4*f4 + w5*f5`:

   | feature | meaning | value |
   |---------|---------|-------|
   | f1 | homogeneity | `255*exp(−Σd) + beta`, from an 8-entry table |
   | f2 | distance to the master | 63 if the master is adjacent, 31 if it is two pixels away |
   | f3 | P(skin) | 0..63 |
   | f4 | motion | 63 if the pixel is ambulant |
   | f5 | previous-frame feedback | 63 if the pixel was in the previous first diffusion |

   The pixel joins when `F >= th_f`. Only *strong* edges stop this stage. The
   core recomputes them from the window's luma with the higher `th_edge2`.
6. **Final mask** (`final_mask`). A joined pixel stays skin only if a
   low-threshold ratio test `16*P(skin) >= theta_final*P(non-skin)` passes.
7. **Write.** For each pixel the core writes `{fd1, rgb & mask}`: the colour
   where the pixel is skin, black elsewhere.

Windows overlap, so a pixel can be written by up to four windows; the last
write wins. The core is about 64 + L clocks of fetch (L = read latency),
106 clocks of Otsu, plus one clock per first-diffusion step, plus 66 clocks
of write-back. Classification alone is 64 + L + 2 clocks.

## Run-time configuration

All thresholds and weights are one packed struct, `skin_pkg::cfg_t`, on the
top's `cfg` port. Three sets of trained data are loaded at run time:
- the polygon half-planes, through `tc_*`;
- the histogram, through `hist_*`;
- all other thresholds and weights, in `cfg`.

No trained values are published with the source algorithm. The testbenches
therefore use a synthetic histogram and polygons (see `tb/top_harness.svh`).

## Interfaces of `skin_detector_top`

Parameters: `N_CORES = 8`, `IMG_W = 640`, `IMG_H = 480`, `FIFO_DEPTH = 16`.

The memory controller, the DRAM, the Ethernet camera link and the DVI output
are not part of this RTL. Their connections are ports:

- `pix_*`: camera pixels in raster order, valid/ready.
- `prev_*`: the previous frame's stored words, in the same order. They feed
  the motion test.
- `pp_*`: `{address, 52-bit word}` from the pre-processor to memory.
- `rd_*` / `wr_*`: per core, one read and one write port.
  - Reads are issued on `rd_req` while `rd_gnt` is high.
  - Reads return in order on `rd_valid`, with `rd_word` (52-bit) and
    `rd_res` (25-bit previous result).
  - Writes go one per clock on `wr_req` while `wr_gnt` is high.
- `frame_stored`, `frame_done`, `seg_busy` and `overrun` report status.
  `n_cand`, `n_annex` and `n_seg` count the windows of the last frame.

The memory side decides where the current and previous frames live.
`tb/mem_model.sv` double-buffers them and is a usable reference for that
protocol.

## Where this RTL departs from, or adds to, the source algorithm

- **Follows the source:**
  - 52-bit tagged pixel;
  - 12-bit histogram bus;
  - eight cores;
  - 8x8 windows at step 4;
  - ternary sets from inner and outer polygons in three colour planes;
  - the `xi = K*T + Phi` neighbour score with two thresholds;
  - minimum white and gray counts per window;
  - annexing of surrounded windows;
  - Otsu homogeneity classes;
  - Bayesian seed with pure-probability and ratio tests, graded by motion
    and feedback;
  - first diffusion on homogeneity only, with weak and strong thresholds
    and an edge stop;
  - second diffusion as a weighted sum of five features with
    `exp(−alpha·Σd) + beta` as the homogeneity feature;
  - final low-threshold Bayesian filter.
- **Choices of this design, where the source is silent:**
  - the field order in the words;
  - the half-plane form of the polygons;
  - the 2/1/0 class weights inside T and Phi;
  - scoring only the window centre;
  - three Otsu classes on 16 bins;
  - the 4-bit-per-channel histogram index;
  - the 1/16 scale of the ratio thresholds and the seed priority
    ambulant > feedback > other;
  - the 8-neighbourhood and summed class distance;
  - feature scaling, `alpha = 1`, the search radius of 2 and the master
    choice in the second diffusion;
  - all handshakes, FIFO depths and the core schedule.
- **Known departures:**
  - The algorithm text describes 16x16 windows; the hardware uses 8x8.
  - In the source architecture, a core classifies a fetched window and
    either keeps it for segmentation at once or fetches the next one. Here
    the cores classify all windows first and segment afterwards. Annexing a
    surrounded window needs the verdicts of its neighbours, and the source
    does not say how it gets them. The price is a second fetch of each kept
    window.
  - The source writes the results back into the pixel's tag bits. Here each
    core writes a separate 25-bit result word per pixel.
  - The source's "virtual line" propagation order is replaced by iterating a
    parallel 8-neighbour step to a fixed point.
  - Overlapping windows resolve by last-write-wins.
  - The first frame after reset has no meaningful previous frame.
- **Speed at defaults.** At 125 MHz with memory that never stalls:
  - pre-processor: about 2.5 ms per VGA frame;
  - cores, with 22% of windows kept: about 2.3 ms per frame.

  The source reports 98 frames/s, which fits this budget. A simulated VGA
  frame with 43% kept windows and memory stalls took 788,340 clocks, about
  159 frames/s at 125 MHz. The catch is the
  memory traffic: about 24 MB per frame, because pass 1 reads every pixel
  four times. This design does not model it.

## Simulation

Every block has a self-checking testbench, `tb/tb_<module>.sv`, built with
plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/skin_pkg.sv tb/skin_ref_pkg.sv tb/tb_skin_core.sv --top-module tb_skin_core
obj_dir/Vtb_skin_core
```

Each testbench prints `TB_RESULT checks=N failures=M`.

`tb/skin_ref_pkg.sv` holds independent reference functions for every
algorithm step: colour conversion, neighbour score, exhaustive Otsu,
worklist-based first diffusion, second diffusion and ratio tests.

**End-to-end test.** `tb_skin_detector_top` runs four 32x24 frames on two
cores, with random memory and camera stalls and a forced overrun. The video
is synthetic: a moving skin-coloured "face" with a dark hole. The test checks
every written pixel against the reference model. It also counts and requires:
- ambulant and edge pixels;
- candidate, rejected and annexed windows;
- seeds, growth in both diffusions and final-mask removals;
- feedback use;
- read and write stalls and an overrun.

**Full size.** The same harness has also been run at the default size: one
640x480 frame on eight cores, with a 10% memory-stall rate. It passed all
614,403 pixel and window checks. The frame took 788,340 clocks from the first
camera pixel to the last result word, about 6.3 ms at 125 MHz. In this
synthetic video 43% of windows were candidates. That run needs about eleven
minutes under Verilator, so no testbench at that size is shipped here. To
repeat it, copy `tb_skin_detector_top.sv` with `W = 640`, `H = 480`,
`NC = 8`, one frame, and a longer watchdog, and instantiate the top with no
parameter overrides.

A note on lint: `rst_n` is used both as an asynchronous reset and inside
`disable iff` of the assertions, so Verilator reports it as a mixed
synchronous/asynchronous signal. This is harmless.
