# Correlation-filter visual tracker in SystemVerilog

This design tracks one object in a video stream. It follows the FPGA system in
"FPGA-based Acceleration System for Visual Tracking" (Song, Yuan, Gao, Sun).
The tracker is a correlation filter of the DSST family. It learns a filter that
answers a sharp peak where the target is. Each new frame is correlated with
that filter in the frequency domain, and the filter is then updated from the
new frame. Scale is estimated the SAMF way. The window around the target is
cut at seven sizes. Each size is resampled to the same 128x128 sample and
scored with the same filter, and the best-scoring size gives the new scale.

Two hardware ideas from the paper shape the RTL:

* **Batch processing of the feature channels.** Each sample yields a 32x32 map
  of 33 channels: 1 grey channel and 32 HOG channels. Giving every channel its
  own FFT and filter datapath would cost too much. So the channels go through
  five parallel lanes in eight batches. Batch 0 carries grey and HOG 0-3 (five
  channels). Batches 1-7 each carry four HOG channels.
* **One time-multiplexed FFT core per 2-D transform.** A 32x32 FFT is done as
  32 row transforms, a transpose RAM, and 32 column transforms, all on the
  same 32-point core. The same hardware also runs the inverse transform that
  turns the response spectrum back into a response map.

Everything runs in fixed point with one clock and an active-low asynchronous
reset.

## Data flow of one frame

```
 pixel stream ──► box_overlay ──► video out (box of the current estimate)
      │
      └─► block_extract (160x160 square around the target, captured on the fly)
                │  random reads
                ▼
       for each of 7 scales (centre scale last):
           scale_calc ──► interp_bilinear (window -> 128x128 + 1-pixel ring)
                          ──► hog_feat (32x32 x 33 feature map, written as cells finish)
                          ──► corr_engine DETECT (8 batches x 5 lanes, then inverse FFT)
                          ──► peak_find x2 (position peak, scale peak)
       target_update (new centre from the position peak, new scale from the best scale peak)
       corr_engine TRAIN on the centre-scale features still held in the map
```

`tracker_top` sequences these steps with one state machine.

1. After reset it transforms the Gaussian label once (`GAUSS`) and raises `ready`.
2. `init` loads the start centre, the search window at scale 1 and the box size.
   The next frame is captured. Its centre-scale sample sets up the filter
   directly: a learning rate of 1 (`TRAIN` with `first`).
3. For every later frame, it captures the block and then scores the seven scales
   in the order 0.985, 0.990, 0.995, 1.005, 1.010, 1.015, 1.000. The centre
   scale is last, so its feature map stays in memory for the update that
   follows.
4. It updates the target and then the filter, and pulses `frame_done`.

Frames that arrive during steps 3-4 still pass through the overlay, but they
are not tracked. The frame is never stored. Only the square around the target
is kept, and all seven windows are resampled from that square.

## Feature map and batches

`hog_feat` takes the 130x130 raster from the interpolator: the 128x128 sample
plus a one-pixel ring, so that every sample pixel has real neighbours. At each
pixel it computes central differences. It then projects the gradient onto nine
unit vectors at 0°, 20°, …, 160°. The projection with the largest absolute
value picks the orientation, and its sign picks one of 18 signed 20° bins. That
absolute value is also used as the magnitude; it is within 1.6 % of the
Euclidean length. This avoids both arctangent and square root.

Magnitudes are summed over 4x4 cells (hard binning). When the last pixel of a
cell arrives, the cell's 33-channel word is written at `cy*32+cx`:

| channel | content |
|---|---|
| 0 | grey: sum of the cell's 16 pixels − 2048 |
| 1..18 | signed orientation bins (contrast sensitive) |
| 19..27 | bin k + bin k+9 (contrast insensitive) |
| 28 | total gradient energy of the cell |
| 29..32 | 0 |

This is close to the common 32-channel HOG (FHOG) layout, but it is not the
same. FHOG normalises each cell by the energy of its four 2x2-cell blocks, and
its four texture channels come from those normalisers. This design has no block
normalisation and does not produce those four channels. The paper does not
define its HOG variant.

The feature map is a 1024 x 528-bit memory: one word holds all channels of one
cell. A batch therefore reads the same address for all lanes. In batch *b*,
lane *l* holds channel *l* for *b* = 0, and channel 4*b*+1+*l* for *b* > 0
(`trk_pkg::batch_channel`). Lane 4 is idle in batches 1-7.

## The 2-D FFT on one core

`fft1d` is a 32-point radix-2 decimation-in-time core that computes one
butterfly per clock. It loads 32 samples in bit-reversed order (32 cycles),
runs 5 stages of 16 butterflies (80 cycles), and then unloads in natural order
(32 cycles). Each stage halves its result, so the forward transform returns
DFT/32 and cannot overflow. The inverse is computed as conj(FFT(conj x)). With
the halving, that is exactly the inverse DFT including its 1/N factor.

`fft2d` sends the incoming rows through the core into a 32x32 transpose RAM.
It then feeds the RAM back into the core column by column, and the column
results leave the block. So the 2-D forward transform is DFT2/1024 and the 2-D
inverse is IDFT2. Results leave in column order, tagged with
`out_idx = v*32+u`. A 2-D transform takes 9,217 cycles.

## Filter arithmetic

With F^l the transformed feature channels, G the transformed label and Z the
transformed new sample:

* model numerator: A^l ← A^l + η (conj(G)·F^l − A^l)
* model denominator: B ← B + η (Σ_l |F^l|² − B)
* response: y = IFFT2( Σ_l conj(A^l)·Z^l / (B + λ) )

`corr_engine` keeps A for every channel: five lane memories of 8 batches x 1024
bins. It also keeps B split into a grey part and a HOG part. Two responses come
from one pass:

* the **position** response uses all 33 channels and B_grey + B_hog;
* the **scale** response uses the 32 HOG channels and B_hog.

This follows the paper's split: grey and HOG features estimate position, HOG
features estimate scale. During detection, the HOG and grey numerator sums are
built up across the eight batches in two 64-bit accumulator memories. Lanes 0
and 1 then run the two inverse transforms side by side.

The engine never divides during detection. After every model update, two serial
dividers compute 2^48 / (B + λ) for all 1024 bins, one result bit per clock.
Detection then multiplies by these reciprocals.

Number formats (all this design's choice):

| quantity | format |
|---|---|
| feature | 16-bit signed; enters the FFT shifted left by 8 |
| FFT data | 24-bit signed re/im; twiddles Q1.14 |
| label g | Q.20, peak 1.0, σ = 2 cells, peak at (0,0) with wrap-around |
| A | 32-bit re/im; conj(G)·F shifted right by 8 |
| B | 40-bit unsigned; \|F\|² shifted right by 16 |
| η | Q.16, default 1638 (0.025) |
| λ | 16 in B units |
| response spectrum | (numerator × reciprocal) >> 50, saturated to 24 bits |

## Position and scale update

Response index `y*32+x` is a circular displacement in cells, with values ≥ 16
meaning negative. One cell is 4 of the 128 sample pixels, i.e. `window/32`
frame pixels. `target_update` therefore moves the centre by
`round(d * win / 32)` on each axis and keeps it inside the frame. The position
comes from the centre-scale sample. The new scale factor is that of the
candidate with the highest scale-response peak, kept within 0.25 … 3.0.

`scale_calc` makes the candidate windows `a_n * s * (W, H)`. The factors a_n
are 0.985 … 1.015 in steps of 0.005 (SAMF's values). Windows are clamped to 156
pixels so they fit the 160x160 block buffer.

## Top-level interface (`tracker_top`)

| port | dir | meaning |
|---|---|---|
| `pix_valid`, `sof`, `pix[7:0]` | in | preprocessed grey raster stream; `sof` marks the first pixel |
| `out_valid`, `out_sof`, `out_pix` | out | the same stream one cycle later, with the box drawn in white |
| `init`, `init_cx`, `init_cy` | in | start tracking at this centre (pulse) |
| `init_win_w/h[7:0]` | in | search window at scale 1, usually 2.5x the target |
| `init_box_w/h` | in | size of the drawn box at scale 1 |
| `tgt_cx`, `tgt_cy`, `tgt_scale` (Q2.14), `tgt_best_n` | out | current estimate; `best_n` = 3 means the scale is unchanged |
| `frame_done` | out | a frame has been tracked and learned |
| `ready` | out | the label has been transformed; `init` may be given |

Parameters: `FRAME_W` = 1280 and `FRAME_H` = 720 (HD), and `BLK` = 160 (block
buffer side).

## Timing

| step | cycles |
|---|---|
| capture | one frame of pixels (the pixel stream itself) |
| interpolation + features, per scale | 130·130·4 = 67,600 |
| detection, per scale | 8 × ~9.3k (batches) + ~9.3k (inverse) ≈ 83k |
| model update | 8 × ~9.3k + 1024 × 49 (reciprocals) ≈ 126k |
| **per tracked frame after capture** | **≈ 1.18M** |

The paper reports more than 153 frames/s but gives no clock frequency. At
200 MHz this schedule needs about 5.9 ms per frame after capture. The seven
scales run one after another here. The paper draws separate position and scale
datapaths that work in parallel, and it also overlaps stages; both would
shorten this.

## Where this RTL departs from, or adds to, the paper

* **Pretreatment.** The paper does not say what its preprocessing step does.
  The top takes an already preprocessed 8-bit grey stream.
* **FFT core.** The paper uses a vendor FFT core. The core here is the small
  serial radix-2 core described above.
* **HOG.** As described above: no block normalisation, channels 29-32 are zero,
  hard binning, and magnitude by projection.
* **Scales.** The paper states 33 scale layers in its algorithm description,
  but then adopts SAMF's 7 scales. 7 are built. The factor values and the
  window clamp are this design's own choices.
* **One engine for position and scale.** The paper draws two paths side by
  side; here one engine serves both. The position response is taken from the
  centre scale.
* **Model update.** The model is updated from the centre-scale sample taken at
  the previous position. It is not re-extracted at the new position.
* **Not from the paper.** The constants η, λ and σ, all number formats, the
  interpolation kind, the 160-pixel block buffer, and the skipping of frames
  that arrive while busy.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/trk_pkg.sv tb/tb_corr_engine.sv \
          --top-module tb_corr_engine -Mdir obj && obj/Vtb_corr_engine
```

Substitute any testbench name. The interesting ones:

* `tb_fft2d` compares against a floating-point DFT: error ≤ 5 LSB, and 9,217
  cycles per transform.
* `tb_corr_engine` learns a random 33-channel map and detects circularly
  shifted copies. Both response peaks must land exactly on the shift.
* `tb_hog_feat` compares every cell word with a behavioural model of the
  feature definition.
* `tb_tracker_top` tracks a textured object moving over 6 frames of 256x200. It
  requires the estimate to stay within 4 pixels, and counts every mechanism:
  label transform, first-frame set-up, batches, inverse transforms, scale
  candidates, updates, reciprocals, skipped busy frames and drawn box pixels.
* `tb_tracker_full` does the same at the default 1280x720 with no parameter
  overrides, over 3 frames. It simulates in about 10 s after a compile of
  about 10 s.

In simulation the tracker stays within 1 pixel of the true centre on these
synthetic sequences. Tracking accuracy on real video has not been measured.

## Files

| file | content |
|---|---|
| `rtl/trk_pkg.sv` | sizes, number formats, complex types, batch/lane mapping |
| `rtl/tracker_top.sv` | top level and frame schedule |
| `rtl/block_extract.sv` | target block capture from the pixel stream |
| `rtl/scale_calc.sv` | seven candidate window sizes |
| `rtl/interp_bilinear.sv` | window → 128x128 (+ ring) resampling |
| `rtl/hog_feat.sv` | grey + HOG feature map |
| `rtl/fft1d.sv`, `rtl/fft2d.sv` | time-multiplexed 1-D core and 2-D transform |
| `rtl/gauss_gen.sv` | Gaussian label |
| `rtl/corr_engine.sv`, `rtl/recip_div.sv` | batch correlation filter, update, reciprocals |
| `rtl/peak_find.sv`, `rtl/target_update.sv` | peak search, new position and scale |
| `rtl/box_overlay.sv` | box drawing on the output video |
| `rtl/sdp_ram.sv` | generic RAM (asynchronous read) |
