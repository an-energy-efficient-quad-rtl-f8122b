# Quad-camera ORB visual front end

A robot that localises itself from cameras needs, for every frame, a set of
distinctive image points (features), the same points found in the other camera
of a stereo pair, and the depth of each point. This RTL computes that front end
for four synchronized cameras (two stereo pairs) and an IMU. The output is
ready for a back-end processor: a stream of disparity and depth records per
pair, and time-tagged IMU samples. There is one idea behind the saving in
hardware. Feature extraction (FE) is faster than feature matching (FM), so one
extractor serves both cameras of a pair in turn. Matching of one frame then
runs while the extractor already works on the next frame.

## Data flow

```
cam0..3 ──► cam_interface ──► frame_ram (2 banks per side)
              ▲ tag                 │
sync_timer ──┤                      ▼
trigger_gen ─┘          fe_pyramid ──► image_resizer ──► pyramid RAM (4 banks)
  │ imu_trig                  │ level 0 then level 1
  ▼                           ▼
imu_interface ─► IMU FIFO   feature_extractor (FAST-9, moments, orientation,
                              7x7 smoothing, rotated BRIEF-256)
                                    │
                                    ▼
                            feature_buffer (slot x side x 2048)
                                    │
                              feature_matcher: stereo_matcher (strip search,
                              Hamming) ─► sad_rectifier (11x11 SAD, depth)
                                    │
                                    ▼
                            disparity FIFO per pair
```

`frame_mux_ctrl` sequences each pair: FE(left), FE(right), then FM. FM then
runs on that slot while FE takes the next frame into the other slot.
`stereo_channel` holds one pair's memories and engines. `quad_cam_frontend`
holds the timer, the triggers, the IMU path and two channels.

## Time tags and synchronization

A single free-running 32-bit counter (`sync_timer`, one count per clock) is
the time base. `trigger_gen` fires all four cameras with one pulse
(`CAM_FPS`, default 30) and the IMU at `IMU_RATE` (default 240 Hz). Every
camera trigger coincides with an IMU trigger. Each camera interface latches
the counter at the trigger, and the frame that follows carries that tag. So
the frames of one instant carry identical tags. The IMU interface stamps a
sample with the tag of the trigger that requested it. A sample that arrives
without a request is still queued with the last trigger's tag and is counted
(`stat_imu_unsolicited`).

The controller pairs a left and a right image only if their tags are equal.
A frame can go missing, for example when a camera skips a trigger or is
dropped for lack of a free bank. The images then stop pairing. The older
image is released, `stat_sync_err` counts the event, and pairing resumes at
the next equal pair. A newer image from the same camera replaces an image
that is still waiting, and the older image's bank is freed.

## Frame multiplexing and buffering

Each side has two image banks. A camera claims a free bank at start of frame.
If no bank is free, the frame is dropped (`stat_drops`). A bank is released
once both pyramid levels of its image have been extracted. The pyramid RAM
has four banks (slot x side). The feature buffer has two slots, each holding
the left and right features of one frame. A slot stays owned by the matcher
until matching ends:

* `stat_overlap` counts frames whose extraction started while FM was still
  busy on the previous frame. This is the overlap the scheme relies on.
* `stat_fm_stall` counts cycles in which both images of a frame had been
  extracted but FM was still busy with the other slot.

With the defaults, one image costs 921600 + 640200 cycles of extraction at
one pixel per clock. That is 15.4 ms per stereo pair at 203 MHz.

## Feature extraction

`fe_pyramid` streams level 0 (1280x720) from the image bank, one pixel per
clock, into `feature_extractor`. At the same time, `image_resizer` writes the
1067x600 level 1 into the pyramid RAM. It then streams level 1 from the
pyramid RAM through the same extractor.

Inside `feature_extractor`, a 31x31 window (`window_gen`, line buffers) of the
raw image feeds two units:

* `fast_detect`, a FAST-9 test with threshold 20 on the radius-3 circle. It
  also computes the intensity moments m10 and m01 over the radius-15 disc.
* `gauss_smooth`, on the raw 7x7 neighbourhood. This is a binomial
  [1 6 15 20 15 6 1] x [1 6 15 20 15 6 1] kernel, divided by 4096 with
  rounding.

The smoothed stream fills a second 31x31 window, 3 rows and 3 pixels later.
Corner coordinates wait in a FIFO until the smoothed window is centred on
them. The descriptor is then sampled in that cycle.

**Orientation.** `orient_compute` quantises the angle atan2(m01, m10) into 32
bins of 11.25 degrees. It uses no division and no arctangent:

1. The moments are scaled down to 8-bit signed values.
2. They are folded into the first quadrant.
3. The vector is compared by cross products against the seven boundaries at
   5.625 + 11.25 i degrees. The boundary directions are 8-bit constants.

A vector that lies within a fraction of a degree of a boundary can land in
the neighbouring bin.

**Descriptor.** `brief_descriptor` makes 256 intensity comparisons between
pairs of smoothed pixels. The pair pattern is fixed: it is drawn by an LFSR
at elaboration time and is roughly Gaussian within radius 13. For every one
of the 32 bins, each pair is rotated at elaboration time using Q7 cosine and
sine values. The hardware then only selects, with a mux by bin, from the
window taps. No rotation arithmetic runs at run time.

Corners closer than 19 pixels to the border are not reported, because the
smoothed patch would leave the image. Each feature is
`{x, y, level, theta, desc[255:0]}`.

## Matching, SAD correction and depth

`stereo_matcher` takes each left feature and scans all right features of the
same slot, one per clock. Only right features inside the search strip are
considered:

* same pyramid level;
* row difference of at most 2;
* 0 <= xl - xr <= 128.

It keeps the smallest Hamming distance (`hamming_dist`, 256-bit popcount); on
a tie it keeps the first. It accepts the match if that distance is at most 64.

`sad_rectifier` then refines the pair. It reads an 11x11 window around the
left feature and slides it over ±5 columns around the right feature, keeping
the shift with the lowest sum of absolute differences. `stat_corrected`
counts pairs where the best shift is not zero. Disparity is d = xl - (xr +
shift), in level-0 pixels: level-1 disparities are multiplied by 1.2 as
(6d+2)/5. The depth is `84000 / d`. The constant 84000 is focal length times
baseline in the record's units, and it is a parameter (`FB`). `feature_matcher`
runs level 0, then level 1, and writes `{xl, yl, level, ham, disp, depth}`
records into the pair's disparity FIFO.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| W, H | 1280, 720 | camera image size |
| W1, H1 | 1067, 600 | pyramid level 1 (scale 1/1.2) |
| MAX_FEAT | 2048 | features per image and level held for matching |
| FIFO_DEPTH | 512 | corner coordinates waiting for the smoothed window |
| DISP_DEPTH | 1024 | disparity records per pair waiting to be read |
| CLK_HZ | 203 000 000 | clock, used for trigger periods |
| CAM_FPS, IMU_RATE | 30, 240 | trigger rates |
| THRESH (FAST) | 20 | FAST intensity threshold |
| HAM_TH, ROW_TOL, MAX_DISP | 64, 2, 128 | match acceptance and search strip |
| WIN, SAD_R, FB | 11, 5, 84000 | SAD window, SAD slide range, depth constant |

## What follows the source design and what is this design's choice

The following come from the source design:

* four cameras in two stereo pairs, triggered by hardware and stamped from
  one timer, with IMU samples stamped from the same timer;
* one extractor shared by the two cameras of a pair, with matching
  overlapped with the next frame's extraction;
* ORB features (FAST, intensity-centroid orientation, rotated BRIEF with 256
  bits) in a two-level pyramid, 1280x720 and 1067x600, made by bilinear
  scaling;
* a 7x7 Gaussian smoothing and 32 orientation bins, with short word lengths
  for the moments;
* a brute-force Hamming match inside a stereo search region, followed by
  SAD correction, disparity and depth;
* a 203 MHz extractor clock.

The following are this design's own choices:

* all port formats;
* the bank and slot counts;
* the tag-mismatch and drop rules;
* the FAST threshold and arc;
* the BRIEF pattern;
* the binomial kernel values;
* the strip bounds and the Hamming threshold;
* the SAD sizes;
* the 84000 depth constant;
* one clock for the whole design (the source runs matching at 230 MHz).

The following were left out:

* the cameras' serial links;
* the DMA/AXI path to DRAM;
* the processor running the back end.

At those places the RTL presents plain FIFO read ports (`disp_*`, `imu_*`).

Known differences and limits:

* Orientation bins can differ by one from a floating-point atan2 next to a
  bin boundary.
* Matching is O(n²). With about 1000 features per image it fits inside the
  extraction time of a 1280x720 frame. With the full 2048 it would halve the
  frame rate.
* Accuracy has not been compared with a software ORB on real images. The
  testbenches use synthetic scenes with exact references.

## Verification

Each block has a self-checking testbench in `tb/`. The testbenches use
random stimulus where it fits and compare against a behavioural reference
written in the testbench:

* the extractor test checks every corner position, orientation bin and
  descriptor bit on a synthetic image;
* the resizer test checks every output pixel against a bilinear reference;
* the matcher test checks against a brute-force search.

`tb_quad_cam_frontend` runs the whole design at reduced size: 64x48 images,
a camera period of 8000 cycles, and a right camera that misses one trigger.
The run makes every mechanism happen and counts it:

* camera and IMU triggers;
* frame overlap;
* matcher stall;
* frame drops;
* a sync error;
* level-1 matches;
* SAD corrections;
* IMU tagging, including one unsolicited sample.

It also checks that every record has the known disparity and the depth
84000/d.

`tb_quad_cam_frontend_full` runs the top with all defaults: 1280x720, one
capture of all four cameras. It takes a few minutes in Verilator. In it,
about 1300 records come out per pair, and roughly 20% of them have a wrong
disparity. The scene is made of flat rectangles, so the corners of different
rectangles on the same rows have almost identical descriptors, and the
minimum-Hamming rule picks a look-alike. The test accepts up to one third
wrong records. Textured scenes would be needed to measure real accuracy.

To simulate a testbench, for example:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/vf_pkg.sv \
    tb/tb_quad_cam_frontend.sv --top-module tb_quad_cam_frontend
./obj_dir/Vtb_quad_cam_frontend
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.
