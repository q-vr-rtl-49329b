# Q-VR hardware: an eccentricity controller and a unified composition/timewarp unit

Q-VR splits the rendering of every VR frame between the headset and a remote
server along the lines of human vision. The small region around the gaze point
(the *fovea*, a circle of radius e1 degrees) is rendered at full quality on the
headset's mobile GPU. The *periphery* is rendered at reduced quality on a remote
GPU, compressed, sent over the network and decoded on the headset. Two things
decide whether such a frame arrives in time:

1. **Where to cut.** A larger fovea means more local GPU work. A smaller one
   means more data to send. The best e1 changes from frame to frame with the
   scene, the head and eye motion, and the network. The **LIWC** (Lightweight
   Interaction-aware Workload Controller) picks e1 every frame with a
   learned table lookup instead of software profiling.
2. **How to put the pieces back together.** Normally the GPU first composes the
   two layers, then runs asynchronous timewarp (ATW): lens-distortion
   correction and reprojection to the newest head pose. Both passes filter the
   same pixels. The **UCA** (Unified Composition and ATW unit) does both in one
   filtering pass, on its own hardware beside the GPU. It does this tile by
   tile, and a tile starts as soon as the layers it needs are in memory.

This repository holds synthesizable SystemVerilog for both units and the top
level that joins them: one LIWC and two UCAs, one per eye. The defaults are a
1920x2160 frame per eye, 32x32 tiles, 8 SIMD4 lanes per UCA and a 2^15-entry
FP16 table.

```
            pose, gaze, #triangles, periphery bytes          measured latencies
                         |                                          |
                  +------v------------------------------------------v------+
                  |                       qvr_liwc                         |
                  |  motion codec -> mapping table (2^15 x FP16) <- updater |
                  |  latency predictor (Eq. T_local, T_remote) ----^        |
                  +---------------------------+----------------------------+
                                              | e1  (radius = e1 * PPD px)
          +-----------------------------------+------------------------------+
          |  eye 0                                             eye 1         |
          |  qvr_tile_scheduler -> qvr_uca                     (same)        |
          |   (layer ready,       lens distortion (4 MUL) on tile corners   |
          |    deadline)          bound test -> 8 x qvr_uca_lane             |
          |                       texel reads <-> frame buffer -> pixel writes
          +--------------------------------------------------------------------+
```

## 1. The eccentricity controller (LIWC)

### 1.1 What is looked up

The controller keeps a table of **latency-gradient offsets**. There is one
offset for every pair (recent motion, change of e1):

* The **motion index** is 10 bits, built by `qvr_motion_codec` from the
  change since the previous frame. Six *movement bits* flag which of the six
  head-pose degrees of freedom moved by at least `POSE_THRESH`. Four *eye
  bits* encode {x moved, x moved left, y moved, y moved up} for the gaze
  point, with a threshold of `EYE_THRESH` pixels.
* The **delta tag** t = 0..10 stands for Δe1 = t − 5 degrees.
* The table address is `{motion[9:0], t[4:0]}`. That gives 2^15 words of
  16 bits (64 KB), with tags 11..31 unused.

A word is an FP16 number of microseconds. It is the expected change of the
local/remote imbalance (T_local − T_remote) if e1 is moved by that Δe1 after
that kind of motion. At reset, `qvr_mapping_table` fills every word with the
prior (t − 5) · `INIT_GRAD` µs: one degree more fovea costs 1 ms more local
work relative to remote work. This takes one word per cycle, 32768 cycles,
during which `liwc_ready` is low.

### 1.2 How a decision is made

On `frame_start`:

1. The motion codec forms the index. `qvr_latency_predictor` evaluates the
   latency model for the current e1:

   ```
   T_local  = #triangles · %fovea / P(GPU)        %fovea = min(1, π (e1·PPD)² / (W·H))
   T_remote = periphery bytes / throughput
   ```

   `%fovea` is in Q0.16, computed with a constant π·2^32/(W·H) fixed at
   elaboration. P(GPU) is in triangles/µs and the throughput in bytes/µs,
   both Q24.8. The two divisions run in parallel on two 40-bit sequential
   dividers (`qvr_seq_div`), so latencies come out in whole µs.
2. The 11 words of the motion entry are read, one per cycle. The controller
   keeps the tag whose gradient is closest to D = T_remote − T_local: the
   change that would best cancel the predicted imbalance. On a tie, the first
   tag (the most negative Δe1) wins.
3. e1 ← clamp(e1 + Δe1, 5, 90), and `ecc_valid` pulses. From `frame_start` to
   `ecc_valid` takes 57 cycles, which is 114 ns at 500 MHz.

### 1.3 How it learns

When the frame has been shown, the measured latencies come back on
`meas_valid`. `qvr_runtime_updater` then does two things:

* It rewrites the word that made the choice:
  g ← g + α(Δlat − g), with α = 64/256.
  Δlat is the measured change of T_local − T_remote since the previous frame.
  This is the reward rule g = (1 − α)·g' + α·Δlat in a form that needs one
  multiplier.
* It re-estimates the model parameters:
  P(GPU) = fovea triangles / measured T_local, and
  throughput = bytes / measured T_remote.

There is no gradient write on the first update after reset, because no
previous imbalance exists yet. An update takes 45 cycles and can overlap
composition. If the next `frame_start` arrives before the measurement, that
frame's learning step is skipped and the new decision goes ahead.

The start values are e1 = 5, P = 600 triangles/µs and throughput = 25 B/µs
(200 Mbit/s Wi-Fi). In the end-to-end test with a fixed environment, e1 climbs
from 5 by up to 5 degrees a frame. The imbalance falls from 28.4 ms to 1.3 ms
within 16 frames.

## 2. The unified composition and timewarp unit (UCA)

### 2.1 Why one pass is enough

Composition averages the two layers: X = ½(S_fovea + S_periphery). ATW then
filters the composed image bilinearly: Y = Σ w_i X_i. Since both are linear,
Y = ½ Σ w_i S_fovea,i + ½ Σ w_i S_periphery,i. So the same bilinear taps can
be taken from both layers directly and averaged, which is a trilinear-style
filter. Only tiles on the fovea border need this. A tile wholly inside the
fovea reads only the fovea layer, and one wholly outside reads only the
periphery layer. Both of those are plain bilinear.

### 2.2 One tile, step by step (`qvr_uca`)

A tile command {tx, ty, use_prev} is taken on `cmd_valid && cmd_ready`:

1. **Classify ("bound?").** `tile_mode()` in the package tests the tile's
   nearest and farthest pixel against the fovea circle (centre, radius
   e1·PPD). The result is `MODE_FOVEA`, `MODE_PERI` or `MODE_BORDER`. It is
   exact for pixel centres.
2. **Lens distortion on the corners.** The latest head-motion reprojection
   offset (`reproj_dx/dy`, Q.8 pixels) is sampled. The four tile corners go
   through `qvr_lens_distortion`:
   r² = x² + y², f = 1 + k1·r² + k2·r⁴, (x', y') = f·(x, y).
   Coordinates are relative to the frame centre, in Q.15 with 1.0 = 1024
   pixels. The four multipliers are shared over two phases:
   x², y², r⁴, k1·r² first, then k2·r⁴, x·f, y·f.
   So one corner is accepted every two cycles, with a result two cycles later.
   Each corner's source position is centre + distorted offset + reprojection.
3. **Map and filter** (`qvr_uca_lane`, 8 lanes). Lane l handles pixels l,
   l+8, l+16, … of the tile. A pixel's source coordinate is the bilinear blend
   of the four corner positions, with weights out of 1024. This stands in for
   distorting every pixel. The lane fetches one texel per cycle and applies
   the weight to all four 8-bit channels at once (the SIMD4 word is one RGBA
   pixel):
   * bilinear: 4 taps, Q0.16 weights, sum >> 16;
   * border: the same 4 taps from each layer, sum >> 17 (the average).

   The periphery layer is stored at half resolution (`PS = 1`), so its
   coordinates are shifted right by one. Taps are clamped to the layer's
   edges.

Timing with 8 lanes is **526 cycles per bilinear tile** and **1038 cycles per
border tile**, from acceptance to `tile_done`. The 526 cycles break down as
128 pixels × 4 taps per lane, plus about 14 cycles for the corners and the
pipeline. For reference, the paper reports 532 cycles per 32x32 block. A full
1920x2160 eye is 4080 tiles. The full-size test composes it in 2.18 M cycles,
about 4.4 ms at 500 MHz, with both eyes in parallel.

### 2.3 Starting early and filling dropped frames (`qvr_tile_scheduler`)

Each UCA has its own scheduler. On `comp_go`, the scheduler latches the fovea
circle and sweeps over the 60x68 tiles, looking at one tile per cycle. A tile
is issued once every layer it needs is ready:

* fovea tiles need `fovea_ready`;
* periphery tiles need `periph_ready`;
* border tiles need both.

Any other tile is skipped until a later sweep, and `n_deferred` counts these
skips. So while the periphery is still on the network, the fovea tiles are
already being composed. If `deadline` comes while tiles remain, the rest are
issued at once with `use_prev` set. The UCA then rebuilds them from the
previous frame's layers with the new head pose, and `n_prev` counts them. A
4080-bit map makes sure each tile is issued exactly once per frame.
The scheduler's own `frame_done` pulses when the last tile has been issued.
The top's `frame_done[eye]` pulses one cycle after the UCA finishes that
tile.

## 3. Top level (`qvr_top`) and how a frame runs

1. **Decision.** Raise `frame_start` with the pose, gaze, triangle count and
   periphery size. After `ecc_valid`, e1 is valid.
2. **Composition.** Raise `comp_go` once. The top latches the gaze point and
   the radius e1·PPD for the UCAs, and both schedulers start. Drive
   `fovea_ready[eye]` and `periph_ready[eye]` from the frame-buffer and
   video-decoder status, and `deadline` from display timing. The top exposes
   texel reads (`req_valid/req`, answered on `rsp` one cycle later) and pixel
   writes (`wr_valid/wr`) per eye and per lane. Connect them to the memory
   system.
3. **Learning.** Raise `meas_valid` with the measured local and remote
   latencies. `upd_done` follows.

Everything outside the two units is reached through ports. That covers the
DRAM, GPU, network, video decoder, sensors and display.

Number formats:

| quantity | format |
|---|---|
| latencies, gradients | µs; gradients stored as FP16 (truncating conversion, saturating at ±65504) |
| P(GPU), throughput | unsigned Q24.8 per µs |
| %fovea | Q0.16 |
| e1 | 8-bit whole degrees, 5..90 |
| lens coordinates, k1, k2 | signed Q.15 (inputs 18 bits, outputs 24 bits) |
| source coordinates | signed Q.8 pixels, 24 bits |
| pixels | RGBA, 4 × 8 bits |

## 4. What follows the paper and what is this design's own

The paper describes these parts, and they are implemented as described:

* the LIWC's four parts;
* the 6 + 4-bit motion index and the −5..+5 delta tags;
* the closest-gradient lookup;
* the reward equation;
* updates of GPU performance and throughput;
* the latency model;
* the 2^15 × 16-bit table;
* the UCA's corner-to-filter flow with the border test;
* bilinear filtering for single-layer tiles and the averaged two-layer filter
  for border tiles;
* 4 multipliers for lens distortion and 8 SIMD4 lanes;
* 32x32 tiles;
* starting tiles before rendering ends;
* rebuilding dropped frames from the previous layers;
* two UCAs.

The following are this design's own choices, because the paper does not
specify them:

* **LIWC:**
  * what a gradient means, and what Δlatency measures;
  * the coding inside the motion bits and their thresholds;
  * α = 0.25 and the tie rule;
  * the e1 limits 5..90, taken from the range of eccentricities the paper
    reports;
  * the initial table content and the starting P(GPU);
  * fixed-point units and the sequential dividers.
* **Lens distortion:** the radial polynomial, and applying it only at tile
  corners with interpolation inside the tile.
* **UCA lanes and memory:**
  * fixed-point arithmetic with truncation in place of floating-point units;
  * one texel per lane per cycle, with a fixed one-cycle memory latency;
  * the half-resolution periphery layer.
* **Interface:**
  * pixels per degree (`PPD` = 20) to turn e1 into a radius;
  * the lens centre at the frame centre;
  * the reprojection as a 2-D offset;
  * the scheduler's sweep order and handshakes.

Known departures and limits:

* The paper budgets "nanoseconds" per decision. This design needs 57 cycles
  (114 ns at 500 MHz).
* Distortion is exact only at the tile corners, so strong distortion inside a
  tile is approximated linearly.
* Texture memory is assumed to answer every lane every cycle. A real memory
  system would need back-pressure, which the lanes do not have.
* With `PPD` = 20, the fovea circle covers the whole 1920x2160 frame from
  about e1 = 57 upward. Larger e1 values, up to the 90 the paper reports, are
  accepted but change nothing further on the display side.
* The middle layer (e2) and the periphery quality come from software on the
  host. They are not hardware here: the periphery arrives as one layer.

## 5. Files and simulation

| file | content |
|---|---|
| `rtl/qvr_pkg.sv` | shared constants, types, FP16 helpers, tile classification |
| `rtl/qvr_motion_codec.sv` | motion index |
| `rtl/qvr_seq_div.sv` | restoring divider used by the predictor and the updater |
| `rtl/qvr_latency_predictor.sv` | T_local / T_remote model |
| `rtl/qvr_mapping_table.sv` | 2^15 × FP16 table with self-fill |
| `rtl/qvr_runtime_updater.sv` | reward update and parameter re-estimation |
| `rtl/qvr_liwc.sv` | controller FSM joining the four parts |
| `rtl/qvr_lens_distortion.sv` | 4-multiplier radial distortion |
| `rtl/qvr_uca_lane.sv` | one SIMD4 mapping and filtering lane |
| `rtl/qvr_uca.sv` | one UCA |
| `rtl/qvr_tile_scheduler.sv` | per-eye tile issue |
| `rtl/qvr_top.sv` | LIWC + 2 × (scheduler + UCA) |
| `tb/tb_qvr_ref_pkg.sv` | reference models: texel pattern, lens model, pixel filter |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_qvr_top.sv` | end to end, 256x256, 16 frames, one dropped frame |
| `tb/tb_qvr_top_full.sv` | one full frame at the default 1920x2160 size |
| `tb/tb_qvr_workloads.sv` | the evaluated networks and GPU clocks, and the 1280x1600 frame size |

Every testbench checks results against values it computes itself and counts
failures. Each ends with the line `TB_RESULT checks=N failures=M`. To run one
with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/qvr_pkg.sv tb/tb_qvr_top.sv \
          --top-module tb_qvr_top -o sim && obj_dir/sim
```

What the main tests cover:

* **`tb_qvr_uca`:** checks every pixel of 40 tiles of all three classes
  against the reference filter, including previous-frame tiles. It also
  checks the tile classification, and that a bilinear tile takes at most 532
  cycles.
* **`tb_qvr_liwc`:** runs the controller in a closed loop with a latency
  environment. The controller must move toward balance, clamp at 90, and skip
  learning when a frame comes early.
* **`tb_qvr_top`:** composes 16 frames of both eyes at 256x256 with changing
  gaze and head motion, and one dropped frame. Every pixel must be written
  exactly once and match the reference. It also counts decisions, updates,
  head turns, fovea, periphery and border tiles, early, deferred and
  previous-frame tiles, and requires each to occur.
* **`tb_qvr_top_full`:** runs the top at its defaults through reset, table
  fill, one decision, a complete 1920x2160 composition of both eyes (16.6 M
  pixels checked) and one update. It finishes in about 10 s of simulation
  time on a workstation.

* **`tb_qvr_workloads`:** runs the controller in a closed loop for Wi-Fi,
  4G LTE and early 5G (25, 12.5 and 62.5 bytes/µs) at a 500 MHz GPU, and
  for Wi-Fi at a 300 MHz GPU. The latency environment is the testbench's own.
  The settled e1 must lie near the balance point, and the order must follow
  the published trend: 5G (about 25) < Wi-Fi at 300 MHz (about 28) < Wi-Fi
  at 500 MHz (about 34) < LTE (about 42). The testbench also composes one
  1280x1600 frame for both eyes with every pixel checked.

The simulator used is two-state, so every register that is read has a reset
value.
