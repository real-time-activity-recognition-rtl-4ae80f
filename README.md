# Adaptive-rate motion image pipeline for intention recognition

A camera watches a doorway or a scene with one person in it. To classify what
the person is doing (or is about to do), the system does not feed a CNN raw
video. Instead it condenses a stretch of video into **one grey image**. In that
image, the silhouettes of the moving person are stacked, the newest at full
brightness and older ones progressively dimmer. Two ideas make that image
independent of how fast the person moves:

1. **Adaptive sampling.** The system does not add every frame. It measures how
   far the silhouette moves (dense optical flow) and adds only every S-th frame,
   where S is computed from the mean flow magnitude and the mean flow angle. A
   fast mover and a slow mover then leave similar trails.
2. **Weighted accumulation.** Each sampled silhouette is written at full
   intensity, and everything already in the image keeps only β percent of its
   brightness. Recent behaviour dominates, and the direction of motion can be
   read from the brightness gradient.

This repository holds synthesizable SystemVerilog for the pixel-processing half
of that system. It covers everything from grey camera pixels to the weighted
image handed to the CNN accelerator. The CNN itself (AlexNet on a vendor deep
learning processor), the application processor and the bus between them are
not included. The top module exposes the weighted image as a plain pixel
stream and the tracking and rate state as status ports.

## Pipeline at a glance

```
 camera ─► dilation ─► erosion ─► Gaussian 3x3 ─► KNN background ─► binary mask
  (grey)   morph_filter morph_filter gaussian_filter  knn_bg_subtractor     │
                                                                            │
           ┌────────────────────────────────────────────────────────────────┤
           │                                   │                            │
    motion_tracker                         frame_delay ─(mask, mask D frames ago)
  (subject present?)                           │
           │                                lk_flow ─► Σ magnitude, Σ angle, count
           │ tracking, track_start             │
           └──────────────► adaptive_sampler ◄─┘  S = round(sqrt(m̄² + ā²))
                                   │ take this frame?
                                   ▼
                         weighted_accumulator ─► wf_valid / wf_x / wf_y / wf_pix
                         acc = mask ? 255 : acc·β/100         (to the classifier)
```

Every stage moves **one pixel per clock** in raster order (x fastest), tagged
with its column and row (`coord_t`, 12 bits). There is no back-pressure,
because a camera cannot be paused. Each stage has a fixed latency and accepts
a pixel on every cycle, with gaps allowed between pixels. Frames are
`IMG_W x IMG_H` (default 320x240). `in_sof` marks pixel (0,0), and an
assertion checks that it comes exactly where a frame should start.

Per-frame decisions are made at frame boundaries: tracking on or off, the
sampling rate, and whether to take the next frame. A decision made at the end
of frame *n* applies from frame *n+1*.

## The modules

| module | role | latency |
|---|---|---|
| `ir_pkg` | types (`coord_t`, `pix_t`, `morph_mode_e`, `polar_t`), π constants, CORDIC and integer-square-root functions | – |
| `win3x3` | two line buffers + 3x3 register window, configurable padding | 1 |
| `morph_filter` | 3x3 grey dilation (max) or erosion (min), `MODE` parameter | 2 |
| `gaussian_filter` | kernel [1 2 1; 2 4 2; 1 2 1]/16, rounded | 2 |
| `knn_bg_subtractor` | per-pixel sample model, KNN test, shadow test → 1-bit mask | 1 |
| `motion_tracker` | foreground area per frame; `tracking`, `track_start` | end of frame |
| `frame_delay` | ring of D one-bit frames; pairs each mask bit with the one D frames earlier | 1 |
| `box_sum` | running WIN x WIN sum of a signed stream (helper of `lk_flow`) | 1 |
| `lk_flow` | windowed Lucas–Kanade flow → per-frame Σ magnitude, Σ angle, count | `done` 5 clocks after last pixel |
| `adaptive_sampler` | Eq. (2) rate S and the every-S-th-frame decision | 1 after `done` |
| `weighted_accumulator` | frame memory of the weighted sum, output stream | 1 |
| `ir_top` | wires all of the above | – |

### The one-pixel shift of 3x3 stages

`win3x3` is causal. When pixel (x,y) arrives, the newest full window it can
offer is centred on (x−1,y−1). Rather than re-align coordinates (which would
need extra buffering), every 3x3 stage tags its output with the *input*
coordinates. Each such stage therefore shifts the image one pixel right and
down, and fills row 0 and column 0 with the operator's neutral value:

- 0 for dilation and smoothing;
- 255 for erosion.

After dilation, erosion and smoothing, the mask sits three pixels right and
down of the camera image. This matters only if you overlay the output on the
input; the motion measurement does not care.

## Background subtraction (`knn_bg_subtractor`)

Each pixel keeps `NSAMP` past grey values, `NSAMP*8` bits per pixel. A new
value *p* is classified as follows:

- **Background:** at least `KNN` samples lie within `DIST_TH` of *p*.
- **Shadow (treated as background):** otherwise, if at least `KNN` samples *s*
  satisfy `s > p ≥ TAU·s`. This means the pixel is darker than the model but
  by no more than a factor `TAU` (Q8; 128 = 0.5).
- **Foreground:** anything else.

The first `NSAMP` frames only fill the model, and the mask stays empty until
`model_ready`. After that, a background pixel overwrites one of its samples.
The slot that gets overwritten rotates once per frame, so the model slowly
forgets. With the defaults this is the largest memory in the design:
320·240·7·8 = 4.3 Mbit.

## Tracking (`motion_tracker`)

Tracking starts when a moving subject is present. The block counts foreground
pixels per frame and declares presence when the count reaches `MIN_AREA`.
`track_start` pulses on the rising edge of presence. It does two things:

- it re-arms the sampler, so the first frame of a new track is taken;
- it clears the weighted image, so each track builds its own picture.

## Optical flow (`lk_flow`) — the hardest part

The flow runs on the **binary mask** between the current frame and the frame D
frames earlier, which `frame_delay` supplies. It is computed for every pixel
and then reduced to three per-frame numbers.

1. **Gradients.** On a 3x3 window of the current mask:
   - Ix and Iy are central differences (range −1..1, doubled to keep them
     integer);
   - It = current − previous.
2. **Structure sums.** The five products Ix², IxIy, Iy², IxIt and IyIt are each
   summed over a `WIN x WIN` window by `box_sum`. `box_sum` keeps one running
   column sum per x, fed by a WIN-row history buffer, and a WIN-deep shift
   register of column sums, so each of the five sums costs O(1) adders per
   pixel.
3. **Solve.** The 2x2 system `[Sxx Sxy; Sxy Syy]·[u v]ᵀ = −[Sxt Syt]ᵀ` is
   solved by Cramer's rule. The solve happens only when det > 0 and the window
   is wholly inside the frame. u and v come out in Q8 pixels per D frames,
   clamped to ±2²⁰.
4. **Polar form.** A 16-iteration CORDIC in vectoring mode gives magnitude (Q8)
   and angle in [0, 2π) (Q16, then Q8). Vectors in the left half-plane are
   pre-rotated by π, and a vector exactly on the +x axis gets angle 0, not 2π.
5. **Reduction.** Magnitude and angle of every solved pixel are added up. After
   the last pixel of the frame the block emits `sum_mag_q8`, `sum_ang_q8` and
   the pixel count for one clock (`done`).

Two properties of this arrangement are worth knowing before trusting the rate
it produces:

- **Flow on a silhouette saturates.** A binary mask has gradients only on the
  outline, and a moving edge of a filled shape gives |u| close to one pixel
  whatever the true speed, once the displacement exceeds the window's reach.
  The magnitude term of S therefore varies little with speed.
- **The mean angle wraps.** Angles are averaged as plain numbers in [0, 2π).
  Motion to the right produces angles near 0 and near 2π in equal measure, so
  their mean lands near π. In practice the angle term dominates S. With a
  40x40 square at 320x240, the simulation gives mean magnitudes of 1.0–1.2 px.
  In the first frames after the square appears, the mean angle is about 3.1 rad
  and S = 3. While it moves straight down, the mean angle is 1.52 rad (about
  π/2) and S = 2, whether it moves 1 pixel or several pixels per frame.

Both effects come from following the rate formula literally (next section).
They are kept because they are what the formula specifies.

## Adaptive sampling rate (`adaptive_sampler`)

The rate formula is S = √(ū² + v̄²). Here ū is defined as the **mean
magnitude** and v̄ as the **mean angle** of the flow, and the block implements
exactly that:

```
m  = sum_mag_q8 / count          (Q8 pixels)
a  = sum_ang_q8 / count          (Q8 radians)
S  = round( isqrt(m² + a²) / 256 )
S  = S_LOW (2)   if count == 0, S == 0 or S > S_MAX      ("zero or infinite")
```

The fallback to a low rate of 2 handles noise that would give a zero or
unbounded rate. `rate_clamped` reports when that happened.

Frame selection uses a phase counter:

- `take = tracking && phase == 0`;
- the phase counts frames modulo S while tracking;
- `track_start` resets the phase to 0, so the first frame of a track is always
  taken.

S is re-evaluated every frame from the latest flow. A new S takes effect for
the phase count of the next frame.

## Weighted accumulation (`weighted_accumulator`)

A full-frame memory of 8-bit pixels. For each pixel of a **taken** frame:

```
acc ← mask ? 255 : ⌊acc · BETA_PCT / 100⌋
```

A new silhouette is therefore written at full white, and everything older
keeps `BETA_PCT` percent of its brightness for each frame taken. After *k*
taken frames a silhouette has brightness 255·β^k. Frames that are not taken
leave the memory untouched and produce no output. Taken frames stream out the
updated pixel one clock after each input pixel; `frame_done` marks the last
pixel, when the image is ready for the classifier.

## Parameters of `ir_top`

| parameter | default | meaning | origin |
|---|---|---|---|
| `IMG_W`, `IMG_H` | 320, 240 | frame size | design choice (not given) |
| `NSAMP`, `KNN` | 7, 2 | background samples per pixel, matches needed | design choice |
| `DIST_TH` | 20 | grey distance for a match | design choice |
| `TAU_Q8` | 128 | shadow ratio 0.5 | design choice |
| `MIN_AREA` | 50 | foreground pixels for "subject present" | design choice |
| `D` | 2 | frames between the two flow frames | best value in the evaluation |
| `WIN` | 15 | flow window, pixels | design choice (see below) |
| `BETA_PCT` | 40 | percent of brightness old frames keep | best value on the intention data |
| `S_LOW` | 2 | fallback rate | as described |
| `S_MAX` | 255 | largest rate accepted before falling back | design choice |

Tuned values for the public action datasets, from the same kind of
evaluation:

| dataset | β | D |
|---|---|---|
| KTH | 40 % | 2 |
| Weizmann | 80 % | 2 |
| HMDB-51 | 20 % | 4 |

All of these are parameters, and `tb_ir_workloads` runs the pipeline with each
row on a synthetic scene. D=4 doubles the mask ring in `frame_delay`, to
307,200 bits at 320x240. The typical frame sizes below are general knowledge,
not stated with the design:

- KTH: 160x120;
- Weizmann: 180x144;
- HMDB-51: clips 240 lines high.

KTH and Weizmann frames fit the 320x240 default. HMDB-51 clips wider than 320
need a larger `IMG_W`.

Throughput is one pixel per clock: a 320x240 frame takes 76,800 clocks. A
30 fps camera needs 2.3 MHz. At 333 MHz the pipeline could take more than
4,000 frames per second; the classifier, not this pipeline, sets the system's
frame rate.

## Where this RTL departs from, or adds to, the original description

- **Frame size** is not given; 320x240 is assumed.
- **Pixel format.** The camera video is in colour, but no colour-to-grey step is
  described. The pipeline takes 8-bit grey pixels, and the conversion is left
  to the camera interface.
- **Noise-removal sizes** are not given. Square 3x3 structuring elements and
  the 3x3 binomial Gaussian are choices. So are all KNN settings.
- **Contours.** Tracking is described as starting at "the presence of a moving
  contour", found in software. Here only the presence decision is built, as
  an area threshold; no contour outlines are extracted. `motion_tracker` is
  therefore a partial implementation of that step.
- **Optical-flow method and window.** The method is not named. Lucas–Kanade
  on the binary mask with central differences is this design's choice. The
  evaluated window sizes are printed as 540, 640 and 740 with no unit that
  maps onto a pixel window, so `WIN` = 15 is assumed.
- **Rate formula.** It is implemented literally, mean magnitude and mean angle
  combined as Cartesian components, with the consequences described in the
  optical-flow section.
- **Sampling and tracking in hardware.** In the original system, tracking and
  sampling run periodically in software on the processor, next to the flow
  and CNN work in the logic. Here they are small hardware blocks so that the
  pipeline is complete without a processor.
- **Weighting wording.** The description says both that the new frame is
  added with "β percent of the previous frames" and that the old frames
  "decrease by (1−β)". The RTL keeps β percent, which is the same thing. The
  newest frame overwrites (saturates to 255) rather than adds, so the image
  never overflows.
- **Training-time trimming.** Dropping five samples at each end of a training
  clip is a dataset-preparation step and is not built.
- **Timing.** The original system met 333 MHz on a Zynq UltraScale+. This RTL
  has not been timed. The flow solve (a wide division) and the sampler's square
  root are single-cycle and would need pipelining to reach that clock.
- **Not included.** The CNN accelerator running AlexNet, the application
  processor and the PS–PL bus. The weighted image leaves on `wf_*`, and the
  status outputs (`tracking`, `rate`, `mean_mag_q8`, `mean_ang_q8`) are what a
  processor would read.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself, with a watchdog. Compile
the package first:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/ir_pkg.sv rtl/*.sv tb/tb_ir_top.sv --top-module tb_ir_top -o sim
./obj_dir/sim
```

(`rtl/ir_pkg.sv` appears twice on that line; verilator accepts it. Or list
the other files explicitly.)

| testbench | what it checks |
|---|---|
| `tb_morph_filter` | dilation and erosion against a software max/min on random images |
| `tb_gaussian_filter` | kernel, rounding, border, latency |
| `tb_knn_bg_subtractor` | learning phase, background, foreground, shadow cases, against a model of the rule |
| `tb_motion_tracker` | area count, tracking on/off, one `track_start` per rising edge |
| `tb_frame_delay` | pairing with the frame D earlier, `out_prev_ok` |
| `tb_lk_flow` | sums and count against a real-valued Lucas–Kanade reference on small frames (WIN=5), `done` latency |
| `tb_adaptive_sampler` | rate formula, rounding, fallbacks, take pattern, re-arm |
| `tb_weighted_accumulator` | decay arithmetic, skipped frames, clear |
| `tb_ir_top` | 64x48, a square that appears, moves, stops and leaves. Counts track starts and stops, taken and skipped frames, fallback rates, weighted frames and a raised rate; each must happen |
| `tb_ir_top_full` | the same scene idea at the default 320x240 with every parameter at its default (runs in a few seconds) |
| `tb_ir_workloads` | three full pipelines side by side with the dataset settings above: 160x120 β 40 % D 2, 180x144 β 80 % D 2, 320x240 β 20 % D 4 (helper `ir_scene_run`; add `-y tb` so verilator finds it) |

To change a size, override the parameters on `ir_top` (all widths derive from
them). The testbenches show how to shrink the design for quick runs.
