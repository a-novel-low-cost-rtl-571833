# Real-time single-object tracker for 1080p60 video

This design follows one coloured object through live 1080p60 video. It marks the object with a box
and sends the boxed video to a display. Everything runs on one 148.5 MHz clock, one pixel per clock.
It targets a low-cost FPGA (Spartan-6 class) with a single DDR3 device.

Classic Camshift back-projects a colour histogram and then iterates mean-shift until it
converges. This design avoids both steps:

* **A binary classifier instead of back-projection.** Each pixel in HSV is compared with the mean
  H, S and V of the object, as measured in the previous frame. The result is one bit: ROI (object
  colour) or not. From then on the tracker reads 1 bit per pixel instead of 24.
* **Parallel candidates instead of iteration.** The object's new position is not refined by
  repeated mean-shift steps. Nine candidate windows around the previous position are evaluated at
  the same time, in one pass over the ROI bits. The best candidate's weighted centroid is the new
  centre.
* **A Kalman predictor as a fallback.** Sometimes the new box differs too much in size from the
  previous one, or no ROI pixel is found. The box is then placed at the position a
  constant-velocity predictor expects.

## Data flow and frame pipelining

```
camera YCbCr 4:2:2 ─► 4:2:2→4:4:4 ─► YCbCr→RGB ─► dilate ─► erode ─┬─► RGB write FIFO ─► DDR3 RGB region (ch 0)
                                                                  └─► RGB→HSV ─► classifier ─► ROI write FIFO ─► DDR3 ROI region (ch 1)
                                                                                 ▲  │
                                                                   HSV means ────┘  └─► hsv_mean (over the box)
DDR3 ROI region ─► address generator ─► ROI map RAM ─► 9 PEs ─► comparator ─► centroid/size ─► Result RAM 1
                                                                                    └─► Kalman correction ─► Result RAM 2, final box
DDR3 RGB region ─► read FIFO ─► position joiner (draws final box) ─► RGB + syncs to the HDMI transmitter (ch 2)
```

Three frames are in flight at any moment. While camera frame *n* is being converted and
classified, the tracker works on frame *n-1*, and the display shows frame *n-2* with the box found
for it. `frame_slot_ctrl` keeps four frame slots in each DDR3 region and moves the three roles
along one slot at every camera frame start. Slots are numbered `n mod 4`. The fourth slot gives a
frame of slack, so no reader ever sees a slot that is being overwritten.

| Region | Content | Packing | Slot stride (128-bit words) | Base |
|---|---|---|---|---|
| RGB | filtered RGB frame | 4 pixels per word, each `{8'h00,R,G,B}` in a 32-bit lane, pixel 0 in bits 31:0 | 2^19 | word 0 |
| ROI | classifier bit | 128 pixels per word, pixel `128k+i` in bit `i` | 2^14 | word 0x200000 |

A 1080p frame fills 518,400 RGB words and 16,200 ROI words (15 words per line). Memory addresses
are 24-bit word addresses. The byte address on the memory port is `{addr, 4'b0}`.

## Pixel pipeline (camera side)

Every streaming stage uses the same three flags with its data: `valid`, `sof` (first active
pixel of a frame) and `eol` (last pixel of a line). No stage holds a frame size, so a stage works
for any frame width that its line buffers can hold.

* `ycbcr422_to_444`: Cb arrives on even pixels and Cr on odd ones. Each chroma pair is repeated for
  both pixels. Latency 2.
* `ycbcr_to_rgb`: BT.709 limited range with coefficients scaled by 256: 298·(Y-16), and
  459, 55, 136 and 541 for the chroma terms. Results are clamped. Latency 2.
* `dilation_erosion`: a 3x3 grey-level maximum and then a minimum on each channel, which is a
  morphological closing. Each stage has two line buffers and a causal window, so its output is the
  filtered image shifted one pixel right and one down. Two stages shift the image by (2,2). The
  displayed video and the ROI map both carry this shift, so the box still lands on the object.
* `rgb_to_hsv`: V = max and S = 255·(max-min)/max. Hue is given in 2° steps, 0..179. Divisions use
  a reciprocal table. Latency 2.
* `roi_classifier`: pixel *k* is ROI when all four tests pass:

  ```
  |H-Hm| < HT,  |S-Sm| < ST,  |V-Vm| < VT,  (α|H-Hm| + β|S-Sm| + γ|V-Vm|) / 256 < AT
  ```

  α, β and γ are fractions of 256 and should add up to 256. All thresholds and weights are
  run-time inputs of the top. Latency 2.
* `hsv_mean`: sums H, S and V over the current box during one frame. In vertical blanking it
  divides the three sums with one sequential divider. The new means apply to the next frame.

**Why the means count only ROI pixels.** When frame *n* streams through, the newest box is the
one found for frame *n-2*, because tracking of *n-1* is still running. A moving object has left
part of that box. If the mean were taken over every pixel, background would leak into it. The
means would then drift, fewer pixels would be classified ROI, and the track would be lost. The
reduced-size test showed exactly this within two frames. So after the first frame, `hsv_mean`
adds a pixel only if the classifier marked it ROI, which needs the HSV stream delayed two cycles
to line up with the ROI bit. The first frame after `init` measures every pixel of `init_box`.
Choose `init_box` inside the object.

## Memory system

Four ports share one memory-controller user port:

| Port | Client | Burst |
|---|---|---|
| 0 | RGB write (`ddr_write_ctrl`) | 32 words |
| 1 | ROI write (`ddr_write_ctrl`) | one line (`H_ACT/128` words) |
| 2 | ROI search read (`roi_addr_gen` inside the tracker) | one search row (`SW/128` words) |
| 3 | display read (`ddr_read_ctrl`) | 32 words |

* **Write controller.** It requests a burst once its FIFO holds a full burst. Addresses run from
  the frame's slot base. At a frame start it takes the new base once its current burst is done.
* **Read controller.** It requests a burst only when its FIFO has room for the whole burst. This
  means a read burst can never be throttled by its consumer. The display reader restarts at the
  start of vertical blanking. That leaves the whole blanking interval to prefetch the next frame.
* **Arbiter (`ddr_arbiter`).** Round robin, with one burst per grant. Requests are
  `{write, addr, len}` structs, and the write data of the granted port is muxed to the burst
  controller.
* **Burst controller (`ddr_burst_ctrl`).** It drives a Spartan-6 MCB-style user port: a command
  FIFO (`cmd_en/instr/byte_addr/bl`), a write data FIFO (`wr_en/data/full`) and a read data FIFO
  (`rd_en/data/empty`, first word falls through). For a write it pushes all data words first and
  then the command. For a read it sends the command and then pops exactly `len` words. It obeys
  every `full` and `empty` flag, so any amount of back-pressure is safe.

Bandwidth at 1080p60 is the main reason the port is 128 bits wide:

* RGB write plus display read: 2 × 1920·1080·60·32 bit ≈ 7.96 Gbit/s.
* ROI write plus search read: about 0.14 Gbit/s.
* The port moves 19 Gbit/s at 148.5 MHz, which leaves room for burst overhead.
* The whole stream stays below the 10 Gbit/s that the DDR3 device provides.

## Parallel Camshift tracker

`camshift_tracker` is the most involved block. For the previous box (centre `(cx,cy)`,
half-sizes `hw,hh`) it does the following:

1. **Fetch (`roi_addr_gen`).** It reads a search region of SW×SH = 512×512 ROI bits, aligned to
   128 pixels and centred on the previous centre, clamped to the frame. The region is read row by
   row from the ROI slot of frame *n-1* into `roi_map_ram` (2048 × 128 bits, one block-RAM array).
2. **Scan.** It reads the RAM back one word per row step and feeds one bit per clock, with its
   pixel coordinates, to all nine processing elements at once. PE *i* is centred at
   `(cx + dx_i·hw/2, cy + dy_i·hh/2)`, with `dx, dy ∈ {-1,0,1}`.
3. **Moments (`camshift_pe`).** Each PE weights an ROI pixel by its distance from the PE centre:
   4 within `hw/2, hh/2`, 2 within `hw, hh`, 1 within `2hw, 2hh`, and 0 outside. It accumulates
   weighted M00, M10 and M01, plus the plain count of ROI pixels in its window.
4. **Compare (`candidate_comparator`).** It picks the PE with the largest weighted M00. On a tie
   the lowest index wins.
5. **Centroid and size.** Two `seq_divider`s form M10/M00 and M01/M00. `isqrt` gives the side of
   a square box from the count, clamped to MIN_BOX..MAX_BOX (16..192). The box is clipped to the
   frame. If M00 = 0 the object is reported lost and the previous box is returned.

The scan takes about 512 rows × 4 words × (128 + overhead) ≈ 0.27 M cycles. The fetch adds
memory time. A frame lasts 2.475 M cycles, so the search finishes well inside one frame; the
tests check this.

Evaluating the nine windows in parallel stands in for the iterations of mean-shift. Each
candidate amounts to one weighted mean-shift step from a different start. The best-supported
start is kept. As a result, a fast object is followed with a lag of a few pixels. In the
full-size test, a 40-pixel square moving 13 pixels per frame is tracked within 7 pixels.

## Kalman correction and results

* `kalman_predictor` is a steady-state constant-velocity (alpha-beta) filter on the box centre,
  with α = 1/2, β = 1/4 and 4 fraction bits. `init` sets the position and zeroes the velocity.
  Each final centre updates it. `pred_x/pred_y` is the position expected for the next frame.
* `kalman_correction` compares the Camshift box's width and height with the previous box. It
  uses the Kalman box when either differs by more than `size_thr`, or when Camshift lost the
  object. The Kalman box is the previous size placed at the predicted centre.
* Three `result_ram`s hold, per frame slot, the Camshift box, the Kalman box and the final box.
  The display reads the final box of the slot it shows. A slot's box is shown only if tracking
  wrote one after the slot last received a new frame.

## Display

`video_timing_gen` produces CEA-861 1080p60 timing: 2200 × 1125 total, with active video first on
each line and in each frame. At the start of vertical blanking the display reader starts to fill
its FIFO from frame *n-2*. One pixel is popped per active clock, 4 pixels per word. The FIFO's
empty state is counted in `underflow_count` (it should stay 0). `position_joiner` replaces pixels
on a 3-pixel outline inside the final box with magenta.

## Top-level interface (`tracking_system_top`)

| Group | Signals |
|---|---|
| clock/reset | `clk` (148.5 MHz), `rst_n` (asynchronous, active low) |
| camera | `cam_valid`, `cam_sof`, `cam_eol`, `cam_y[7:0]`, `cam_c[7:0]` (Cb on even, Cr on odd pixels) |
| control | `init` (pulse) with `init_box`; `thr_h/s/v/a[7:0]`; `alpha/beta/gamma[8:0]` (/256); `size_thr[11:0]` |
| memory port | `mem_cmd_*`, `mem_wr_*`, `mem_rd_*` (Spartan-6 MCB user port, 128-bit data) |
| video out | `vid_de`, `vid_hsync`, `vid_vsync`, `vid_rgb[23:0]` |
| status | `track_box`, `track_valid`, `track_used_kalman`, `track_lost`, `frame_count`, `underflow_count` |

Boxes are `box_t {x0, y0, x1, y1}` with 12-bit inclusive corners (`tracker_pkg`).

The camera must deliver frames with the same period as the display raster (2200 × 1125 clocks).
The display timing runs freely from reset and is not locked to the camera.

After `init`, the first camera frame measures the object's means. The second is classified
with them. Tracking results start during the third frame and then arrive once per frame.

Parameters: frame and raster sizes (`H_ACT`, `V_ACT`, `H_*`, `V_*`), search region (`SW`, `SH`),
candidate grid (`GRID`), box limits (`MIN_BOX`, `MAX_BOX`), burst length and display FIFO depth.

Constraints:

* `H_ACT`, `SW` and `SH` must be multiples of 128.
* `MAX_BOX·5/4 ≤ SW/2`. This is checked by an assertion.

## Where this design departs from, or adds to, the published description

The published description names most blocks without their insides. Taken from it are:

* the block structure;
* the 4:2:2 input, 1080p60 at 148.5 MHz;
* the two DDR3 regions of four frames each;
* the *n* / *n-1* / *n-2* pipelining;
* the four-test binary classifier;
* centre-weighted moments;
* parallel candidates;
* the size-threshold switch to a Kalman predictor;
* the corner-pair output.

This design's own choices:

* The colour matrix, hue format and chroma up-sampling.
* 3×3 closing as the "dilation and erosion".
* The ROI-only mean measurement described above.
* The weight rings 4/2/1.
* A 3×3 candidate grid at half-box offsets.
* A square box from the ROI count instead of second-order moments.
* An alpha-beta filter as the Kalman predictor, with previous size at the predicted centre.
* The memory packing, burst sizes and the MCB-style memory port.
* The 3-pixel magenta outline.

The original system is said to use floating-point arithmetic in its pipeline. Here every
operation is fixed point:

* 8-bit colour coefficients;
* integer hue;
* weights as fractions of 256;
* integer moments;
* a 4-fraction-bit Kalman state.

No resource figures were reproduced for a Spartan-6 LX part. The synthesis sizes reported by
open tools differ from the published utilisation (about 16 k registers, 14.6 k LUTs and 42 DSP
slices) and are not comparable.

The published evaluation was done in software, so its speed figure (about 309 frames/s) says
nothing about this hardware. The hardware processes frames at the camera rate, 60 frames/s.
The camera, the DDR3 device with its PHY, and the HDMI transmitter are outside the design. The
top exposes their interfaces as ports.

## Simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each ends with
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/tracker_pkg.sv tb/tb_camshift_tracker.sv --top-module tb_camshift_tracker
./obj_dir/Vtb_camshift_tracker
```

`tb/ddr3_model.sv` is a behavioural model of the memory port. It has an associative-array memory,
a settable read latency, and optional random `full` back-pressure.

`tb/tracker_tb_env.sv` is the end-to-end environment. The camera model sends a grey scene with a
red square that moves every frame and is missing in one frame. The environment checks:

* each box centre against the square;
* that every result arrives before the next frame;
* that the empty frame is reported lost and handled by the Kalman predictor;
* that the displayed video carries the outline and the object;
* that the display FIFO does not underflow.

It also counts each mechanism: Camshift result, Kalman correction, loss, arbiter collisions,
memory back-pressure, slot wrap and the drawn box. Every one must occur at least once.

Two testbenches use this environment:

* `tb_tracking_system_top` runs it at 256×128 in a 300×140 raster with a 128×128 search region,
  for 12 frames, in a few seconds.
* `tb_tracking_system_full` runs the top with every parameter at its default: 1080p60, 512×512
  search, 7 frames (about 17 M cycles). It takes roughly a minute.
