# AceleradorSNN in SystemVerilog: an event-driven camera controller in a closed loop

Two cameras look at the same scene. A dynamic vision sensor (DVS) reports
brightness changes as sparse events within microseconds. A conventional RGB
sensor delivers high-resolution frames that need a full image signal
processor (ISP) before anyone can use them. This design puts a small spiking
neural network (SNN) on the event stream. Each time window, it decides where
the object of interest is and how the light is changing. It then rewrites the
ISP's parameters so the next RGB frame comes out well exposed, suitably
denoised and marked with the region that matters. The two halves run on one
clock and meet at a single register interface.

```
 DVS events ──► event_encoder ─► spiking_conv_layer L1 ─► spiking_conv_layer L2 ─► detection_head
 (t,x,y,p)      voxel grid,       2 → 8 ch, stride 2       8 → 16 ch, stride 2      spike-count grid
                ping-pong                                                              │
                                                                                       ▼
                                               host ──┐                      cognitive_controller
                                                      ▼                                │ 6 writes/window
 raw Bayer ──► isp: dpc ► wb_gain ► demosaic_mhc ► nlm_denoise ► gamma_lut ► csc_ycbcr ► luma_sharpen ──► YCbCr
 AXI4-Stream       ▲ awb_stats (taps after dpc)          isp_sync_ctrl: shadow → staged → active,
                                                         frame tag, ROI flag, LUT writes
```

The top module is `aceleradorsnn_top`. Every block has its own file in `rtl/`, and
`isp_pkg` and `npu_pkg` hold the shared types and the register map.

The published description covers only part of this design. It fixes the
architecture, the event encoding, the LIF neuron and the ISP stage list with
its algorithms. It does not give the network's layers, the detector head,
the decision rules, the register map or any bit widths. Those parts are this
design's own and are marked as such below and in each file's header.

## 1. From events to a voxel grid (`event_encoder`)

An event is `(t, x, y, p)`: a 32-bit time in µs, the pixel position, and
whether the pixel got brighter (ON, `p = 1`) or darker. The encoder cuts
time into back-to-back windows of `T_BINS × BIN_US` µs (default 5 × 10 ms).
For every window it builds a one-hot tensor `[bin][polarity][y][x]`: one bit
per pixel, set if the pixel fired at least once in that bin. That tensor is
what the SNN consumes.

How it works:

* **Bin search without a divider.** The encoder keeps a running bin
  boundary. An event at or past the boundary advances it by one bin per
  clock, with `ev_ready` low meanwhile, until the event fits. An event past
  the last bin closes the window.
* **Ping-pong storage.** Two grids of `T·2·H` words of `W` bits each. One
  fills while the SNN reads the other. Once layer 1 has read a grid, it is
  released and cleared, one word per clock.
* **Back-pressure.** If a window closes while the other grid is still in use
  or being cleared, `ev_ready` stays low. No event is ever dropped.
* **Ordering.** Events must arrive in time order, and an assertion checks
  this.
* **Statistics.** Per window, the encoder also counts ON and OFF events and
  gives the window a number (`win_id`).

The default 304 × 240 sensor matches the event camera of the automotive
dataset the network was evaluated on. That size is background knowledge,
not a figure from the design description.

## 2. The spiking layers (`lif_neuron`, `spiking_conv_layer`)

**Neuron.** Each neuron is a discrete-time leaky integrate-and-fire unit,
the Euler step of `τ du/dt = −u + R·I` with the leak as a power of two:

```
u' = sat16( u − (u >>> leak_shift) + I )      leak_shift = 0 means no leak
spike = (u' ≥ v_th);   if spike: u' = 0
```

**Layer.** A layer is a 3×3 convolution with stride 2 and zero padding.
Inputs are 0/1 spikes, so a neuron's input current is simply the sum of the
int8 weights whose input bit is set. There are no multipliers. Work runs row
by row:

1. For each bin and output row, load the three input rows of every input
   channel (`3·CIN` clocks).
2. Sweep the output columns, one per clock. All `COUT` neurons of a position
   update in parallel, through `COUT` `lif_neuron` instances and a membrane
   memory.
3. Write the row of output spikes to the layer's own spike buffer (1 clock).

One window costs `T·OUT_H·(3·CIN + OUT_W + 2)` clocks. At the defaults that
is 96,000 for L1 and 30,600 for L2. Membranes start at zero at the first bin
of every window. Weights and the LIF constants (`v_th`, `leak_shift` per
layer) are loaded from outside. They come from offline surrogate-gradient
training, which is outside the hardware.

**Scale.** The design description evaluates a full Spiking-YOLO network but
gives none of its layers. This RTL has a two-layer backbone
(2 → 8 → 16 channels) as a placeholder that a real trained network would
replace. More layers are more instances of the same module behind a longer
sequencer in `npu`.

## 3. Deciding what to do (`detection_head`, `cognitive_controller`, `npu`)

**Detection.** `detection_head` splits L2's output into cells of 4 × 4
positions (a 19 × 15 grid at the defaults). It counts each cell's spikes over
all channels and bins. A cell whose count reaches `obj_th` is occupied. The
result is the number of occupied cells and their bounding box. This
objectness grid is the simplest detector that yields both "object present"
and "where". It is not a YOLO head.

**Decision.** `cognitive_controller` turns the detection and the window's
ON/OFF counts into exactly six writes on the ISP control interface:

| write | rule (all constants are parameters) |
|---|---|
| `REG_CTRL` | AWB on. Gamma bank 1 (linear) if ON events outnumber OFF events by more than 2:1 (scene brightening). Bank 0 (gamma ½, lifts shadows) for the reverse (scene darkening). Unchanged otherwise, or below `MIN_EV` events. |
| `REG_DGAIN` | Digital gain down by `DG_STEP` when brightening, up when darkening, kept within `[DG_MIN, DG_MAX]`. |
| `REG_NLM` | Denoising strength `NLM_FAST` (light) if the window held more than `ACT_HI` events, since fast motion needs detail. `NLM_SLOW` otherwise. |
| `REG_ROI_X/Y` | The detected box scaled from grid cells to RGB pixels. The full frame if nothing was found. |
| `REG_COMMIT` | The window number. |

**Sequencing.** `npu` chains encoder → L1 → L2 → head → controller for one
window at a time. The grid is released as soon as L1 has read it, so event
intake overlaps with L2, the head and the register writes.

## 4. Keeping the two streams aligned (`isp_sync_ctrl`)

This is the part that is easiest to get subtly wrong. The NPU's writes
arrive at arbitrary times, but a frame must never be processed with half of
one update and half of another. Each register therefore exists three times:

1. **Shadow.** Every register write lands here.
2. **Staged.** A write to `REG_COMMIT` copies the shadow set here, and marks
   it pending together with the 16-bit tag (the DVS window number).
3. **Active.** At the first pixel of the next RGB frame entering the ISP
   (`tuser` beat at the input), the staged set becomes active and the tag
   becomes `frame_tag`.

Every output frame therefore knows which DVS window configured it. That
tag, together with the frame-start commit, is what "aligning the DVS and RGB
streams" means here.

Edge cases:

* If two commits arrive before a frame start, the later one wins.
* A commit in the same clock as a frame start waits for the following frame.
* Writes that belong to a later, not yet committed update cannot leak into
  the staged set. The end-to-end test provokes exactly this case by holding
  the bus with host traffic while the NPU is mid-update.

Stage parameters are also frame-consistent on the way through. The DPC
threshold, NLM strength and sharpening amount are each latched by their
stage when it emits a frame's first pixel. White-balance gains are chosen at
the input frame start: the AWB result when `awb_auto` is set, the manual
gains otherwise. The ROI is latched when a frame's first pixel leaves the
ISP. `m_roi` flags every output pixel inside it.

### Register map (10-bit address, 32-bit data, valid/ready, one write per clock)

| addr | name | bits |
|---|---|---|
| 0x000 | CTRL | [0] awb_auto, [1] gamma bank |
| 0x001–0x003 | GAIN_R/G/B | [11:0] manual WB gain, Q4.8 (256 = 1.0) |
| 0x004 | DGAIN | [11:0] global digital gain, Q4.8 |
| 0x005 | NLM | [3:0] denoise strength, 0 = bypass |
| 0x006 | SHARPEN | [3:0] luma sharpening amount, 0 = bypass |
| 0x007 | DPC_TH | [7:0] defect threshold |
| 0x008 / 0x009 | ROI_X / ROI_Y | [11:0] start, [27:16] end (inclusive) |
| 0x00A | EXPOSURE | [15:0], passed out to the RGB camera (`exposure` port) |
| 0x010–0x018 | CSC0..8 | signed Q2.8 matrix coefficients, row-major Y, Cb, Cr |
| 0x01F | COMMIT | [15:0] tag; stages the shadow set for the next frame |
| 0x200 + bank·0x100 + i | gamma LUT | [7:0] entry i of the bank; written directly, not shadowed |

Reset values: AWB on, gamma bank 0, all gains 1.0, NLM 2, sharpen 4, DPC
threshold 40, full-frame ROI, BT.601 full-range matrix.

In `aceleradorsnn_top` a host shares this bus with the NPU and has
priority. The NPU's write simply waits. This is how LUT curves and colour
matrices are loaded. By convention they are written into the gamma bank that
is not in use, and a later commit switches to it.

## 5. The pixel pipeline (`isp` and its stages)

Every stage is an AXI4-Stream slave/master pair. `tuser` marks start of
frame, `tlast` marks end of line, and `s_tready = !m_tvalid || m_tready`
lets `m_tready` back-pressure stall the whole chain without loss. No frame
is stored.

**Line buffers and windows (`window_gen`).** The four spatial stages use
`window_gen`, which keeps `2K` line buffers and a (2K+1)² register window:
5×5 for DPC, demosaic and NLM, 3×3 for sharpening.

* **Borders.** Taps outside the frame are mirrored about the edge pixel
  (−1 → 1, W → W−2). This keeps every tap on the right Bayer colour.
* **Flush.** After the last pixel of a frame, the module pushes out its last
  rows by itself. This takes `K·W + K` clocks, with `s_tready` held low
  meanwhile. The camera therefore needs at least that much blanking between
  frames, which is two lines plus two pixels for the 5×5 stages.

**Stages in order:**

1. **`dpc`, defective pixels (raw Bayer).** The eight nearest same-colour
   neighbours are two pixels away in eight directions. A pixel is defective
   if it is brighter than all eight (hot) or darker than all eight (dead),
   each by more than `DPC_TH`. It is then replaced by the mean of the
   opposite neighbour pair (horizontal, vertical or either diagonal) whose
   two values are closest, so the fill follows edges. `m_defect` flags each
   replaced pixel. These are this design's own rules. The description only
   asks for deviation "across multiple directional gradients" in a 5×5
   window.

2. **`awb_stats` and `wb_gain`, white balance (raw Bayer).**
   * `awb_stats` taps the stream after DPC without stalling it. It sums the
     R, G and B pixels that lie within [16, 240], so clipped and black
     pixels are ignored.
   * At frame end, a small state machine with one serial divider (`seq_div`)
     computes gray-world gains: `gain_c = 256 · mean_G / mean_c`, clipped to
     4095, with G fixed at 1.0. This takes about 200 clocks. A frame that
     ends while it is still busy is skipped.
   * `wb_gain` computes `out = clip((pix · gain_c · dgain + 2¹⁵) >> 16)`.
     Here `dgain` is the NPU-driven global gain. Exposure itself belongs to
     the camera, so it is passed out on the `exposure` port.

3. **`demosaic_mhc`, Bayer to RGB.** Malvar-He-Cutler: the eight 5×5 linear
   kernels with their published coefficients, scaled by 16, rounded
   (`(x+8)>>4`) and clipped. RGGB order.

4. **`nlm_denoise`, non-local means on RGB.** The search window is the 3×3
   set of neighbours, and each candidate is compared through its 3×3 patch.
   * Patch distance is the sum of squared differences of the intensity
     `(R+2G+B)/4`.
   * The weight is `256 >> s` with `s = (d/8) >> (strength−1)`, and 0 once
     `s > 8`. This is a base-2 stand-in for `exp(−d/h²)`, and it needs no
     multiplier for the weight itself.
   * The output is the rounded weighted mean per channel. The centre always
     has weight 256, so the divisor is never 0.
   * Strength 0 bypasses the filter, and a larger strength smooths more.

5. **`gamma_lut`, per-channel gamma.** Two banks of 256 × 8 bits, with the
   bank chosen per frame. After reset an initialiser writes bank 0 with
   `round(sqrt(255·x))` and bank 1 with the identity. This takes 256 clocks,
   with the input held off.

6. **`csc_ycbcr`, colour conversion.**
   `out_k = clip(((c·[R G B] + 128) >>> 8) + off_k)`, with offsets 0 / 128 /
   128 and nine programmable coefficients. The reset value is BT.601 full
   range.

7. **`luma_sharpen`, luminance sharpening.**
   `Y' = clip(Y + amount·(8Y − Σ8 neighbours)/64)`. Cb and Cr pass through
   unchanged, which is the point of sharpening after the colour conversion.

**Throughput.** One pixel per clock in steady state. A 1280 × 720 frame
takes 921,600 clocks plus the flush blanking, about 108 frames/s at
100 MHz. An NPU window takes about 132,000 clocks, far below its 50 ms span.

## 6. Where this design departs from the published description

* **Network.** A two-layer spiking backbone and a spike-count grid stand in
  for the evaluated Spiking-YOLO, whose layers are not given. Detection
  quality is therefore not comparable.
* **Exposure.** The description has the ISP adjust exposure. Here exposure
  is a register that is passed out to the camera, which the NPU does not
  write. The NPU acts on brightness through the digital gain and the gamma
  bank instead.
* **White balance.** "Modifying the AWB gains" becomes: the NPU keeps
  gray-world AWB running and scales the image with the global gain. Manual
  per-channel gains exist in the register map (host or future rules) but
  the built-in rules do not use them.
* **Lighting anomalies.** "Localized lighting anomalies" are reduced to the
  global ON/OFF balance of a window. The ROI comes from the detection
  alone.
* **Order of white balance.** Gains are applied to the raw Bayer data right
  after DPC and before demosaicing, which is the usual place. The AWB
  statistics are taken from the same point.
* **Sizes and widths.** All of these are this design's choices: the
  304 × 240 event sensor, the 1280 × 720 RGB frame, 8-bit pixels, 5 bins of
  10 ms, int8 weights, 16-bit membranes, Q4.8 gains and Q2.8 colour
  coefficients.

## 7. Using and checking the RTL

The top-level parameters are `SENSOR_W/H`, `T_BINS`, `BIN_US`, `C1`, `C2`,
`CELL` and `IMG_W/H`. The top has these interfaces:

* the event stream (`ev`, `ev_valid`, `ev_ready`);
* the weight-load port (`w_we`, `w_layer`, `w_co`, `w_ci`, `w_k`, `w_data`)
  and the LIF/objectness constants;
* the host control port (`host_cfg_*`);
* the Bayer input and YCbCr output streams, plus `m_roi`, `frame_tag` and
  `exposure`;
* status outputs: `det`, `windows` and `commits`.

Reset is asynchronous and active low.

Each module has a self-checking testbench in `tb/`. All of them print
`TB_RESULT checks=N failures=M` and have a watchdog. Build one with plain
Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/isp_pkg.sv rtl/npu_pkg.sv \
    $(ls rtl/*.sv | grep -v _pkg) tb/tb_isp.sv --top tb_isp
./obj_dir/Vtb_isp
```

**Stage testbenches.** The streaming stages are driven with random valid
and ready gaps. Each output pixel is compared with a reference computed in
the testbench from the stored frame:

* DPC with planted hot and dead pixels;
* demosaicing from the MHC kernels;
* NLM with its weights;
* gamma, colour conversion and sharpening in real arithmetic.

**Control and NPU testbenches.**

* `tb_isp_sync_ctrl` covers commit timing, tags, LUT writes, manual/AWB gain
  selection, and partial updates kept out of a commit.
* `tb_event_encoder` compares the voxel grid and its counts with a
  reference, and provokes back-pressure.
* `tb_spiking_conv_layer` checks every membrane and spike against a
  behavioural model, and checks the cycle count given above.
* `tb_isp` runs three frames through the whole ISP against a frame-level
  model, including AWB taking effect one frame later.
* `tb_npu` runs the NPU end to end at reduced size.

**End-to-end testbenches.** `tb_aceleradorsnn_top` runs the whole system at
reduced size: a 16 × 12 event sensor and 24 × 16 RGB frames.
`tb_aceleradorsnn_full` runs it at the default sizes: 304 × 240 events,
1280 × 720 frames and 3 windows. The full-size run finishes in well under a
minute of simulation time. Both play a moving bright blob and a darkening
scene while frames stream with random gaps, and both check that:

* every frame arrives complete, with correct framing;
* the ROI flag covers exactly the box in force for that frame;
* every NPU decision that is not superseded arrives intact in the ISP, with
  its tag, at a frame start.

They also count each mechanism and fail if any of these never happened:

* SNN spikes and a detection;
* an ISP commit and a gamma bank switch;
* host/NPU contention on the control bus;
* a defect correction and an AWB result;
* ISP input stalls and event back-pressure.

**Known limits.**

* The ISP needs `K·W + K` clocks of blanking after each frame.
* Events must be time-ordered.
* A window is closed only by a later event.
* An AWB result is skipped if frames follow each other faster than the
  divider, about 200 clocks.
