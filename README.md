# AdvCam camera trigger in SystemVerilog

AdvCam is a silicon-photomultiplier camera proposed for the Large-Sized
Telescopes of the Cherenkov Telescope Array. Every pixel is digitised without
pause, with 14-bit samples at about 1 GHz. A trigger therefore has to look at
the whole camera one sample at a time and pick out the faint, compact, brief
flash of an air shower from the night-sky background, which lights every pixel
at random. This RTL implements the hardware part of the multi-level trigger
described in "The trigger design for AdvCam" (Burmistrov et al.):

1. **Level 1 (front-end boards).** Sums over overlapping 49-pixel patches, one
   patch centred on every 7-pixel flower. A threshold on each sum gives one
   L1 bit per flower per sample.
2. **Local Level 2 (central trigger processor).** TDSCAN, a density filter
   working in space and time over the L1 bits. It replaces the DBSCAN
   clustering algorithm with something that can run on a stream. It confirms
   the event (L2 Mono) and gives the shower position.
3. **Topo-Stereo Level 2.** Coincidence with the Local L2 triggers of the other
   three telescopes, with a check that the shower positions agree. Optionally
   an external gamma/hadron classifier also has to accept the event. Then the
   front-end ring buffers read out a 75-sample window of every pixel.

The software Level 3 trigger, the CNN-based alternatives and the analog front
end are not part of this RTL (see "What is not here").

## Files

| file | role |
|---|---|
| `rtl/advcam_pkg.sv` | sizes, flower-lattice geometry functions, shared types |
| `rtl/flower_sum.sv` | 7-pixel digital sum |
| `rtl/l1_trigger.sv` | 49-pixel super-flower sums and L1 bits for the whole camera |
| `rtl/tdscan.sv` | spatio-temporal hexagonal density filter (Local L2 core) |
| `rtl/l2_local.sv` | L2 Mono decision and shower barycenter |
| `rtl/topo_stereo.sv` | coincidence with other telescopes and position check |
| `rtl/camera_trigger_ctrl.sv` | central trigger processor sequencer (g/h, release, dead time) |
| `rtl/ring_buffer.sv` | front-end board sample memory with window readout |
| `rtl/advcam_trigger.sv` | top: one camera |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Geometry: pixels, flowers, super-flowers

Pixels are hexagons. A **flower** is a seed pixel and its six neighbours, so 7
pixels. Flowers tile the focal plane on a hexagonal lattice of their own. A
**super-flower** is a flower and the six flowers around it, so 49 pixels. The
trigger never needs pixel positions, only the flower lattice. Pixel `k` of
flower `f` is input `adc[7*f + k]`, and the order of the 7 pixels inside a
flower does not matter.

`advcam_pkg` places the flowers in axial lattice coordinates `(q, r)`. The
lattice distance is `max(|dq|, |dr|, |dq+dr|)`, and the six neighbours are at
`(±1,0), (0,±1), (+1,-1), (-1,+1)`. The camera is modelled as a hexagon of
flowers of radius `R`, with `3R(R+1)+1` flowers, numbered column by column (q
ascending, then r ascending). The default `R = 19` gives **1141 flowers, 7987
pixels**. That equals 163 front-end boards of 7 flowers each, the board count
the proposal draws. The proposal's text also quotes 1171 flowers. A hexagon
cannot have that many cells, and the real outline is not published, so the
hexagonal outline is an assumption of this design. All neighbour wiring is
computed at elaboration by constant functions (`flower_index`, `flower_q`,
`flower_r`, `hood_member`). A different outline only needs these functions
changed.

Board `b` holds flowers `7b .. 7b+6`, that is pixels `49b .. 49b+48`. This
assignment is also a choice of this design.

## Level 1

`flower_sum` adds the 7 raw 14-bit samples of a flower (17-bit result,
registered). `l1_trigger` adds each flower's sum to those of its six
neighbours. That gives 1141 overlapping 49-pixel patch sums (20 bits), one
centred on every flower, so no part of the camera is uncovered. Neighbours
beyond the camera edge count 0. Each patch sum is compared with `threshold`
(strictly greater), giving the flower's **L1 bit**. One frame of 1141 L1 bits
per sample is the "trigger binary waveform". `l1_any` is the OR of the frame.
It is the L1 filter that a CNN-based Level 2 would need, and the TDSCAN path
does not use it.

No pedestal is subtracted. The threshold is absolute and includes 49 times the
pedestal. For example, with pedestal 100 a threshold of 6000 sits about 1100
counts above the patch baseline.

Latency: samples at edge n, flower sums after n+1, L1 frame after n+2,
`l1_any` after n+3.

## TDSCAN: the density filter

DBSCAN calls a point "core" if at least MinPts points lie within a distance
Eps of it. TDSCAN turns this into a fixed convolution over the L1 bit frames.
It needs no cluster bookkeeping, so it accepts a new frame every clock with a
fixed latency:

- The kernel is a hexagon of flowers of lattice radius `EPS_XY` (1, 7, 19 or
  37 flowers for radius 0 to 3), taken in each of the `2*EPS_T+1` frames
  `N-EPS_T .. N+EPS_T`.
- Output bit of flower `f` for frame `N` = (number of set L1 bits inside the
  kernel centred on `f` at frame `N`) `> min_pts`.

This follows the proposal's figure, which prints the test as "8 > minPts?".
DBSCAN's own definition says "at least MinPts", so for that meaning set
`min_pts` one lower. Different clusters are not told apart. The output is
again one bit per flower per frame.

The pipeline in `tdscan.sv`:

| stage | register | content |
|---|---|---|
| 0 | `hist[0]` | input frame |
| 1 .. 2·EPS_T | `hist[k]` | older frames; `hist[EPS_T]` is the frame being judged once its EPS_T successors have arrived |
| next | `tcnt[f]` | temporal count: set bits of flower f over the 2·EPS_T+1 frames |
| next | `scnt[f]` | sum of `tcnt` over the hexagonal neighbourhood of f |
| next | `out_frame[f]` | `scnt[f] > min_pts` |

Frame N presented at edge n leaves after edge **n + EPS_T + 4**. For
`EPS_T = EPS_XY = 1` that is 5 cycles. The published FPGA build runs at 350
MHz with a quoted latency of about 14.28 ns, and 5 cycles at 350 MHz is
14.29 ns. Doing the temporal count first means the spatial sum adds at most
`hex_count(EPS_XY)` small numbers per flower. For EPS_XY = 1 that is 7 two-bit
counts. `EPS_T` and `EPS_XY` are elaboration parameters, because they set the
latency and the wiring. `min_pts` is a run-time input of 8 bits. The largest
kernel in the proposal's resource study (EPS_T = 6, EPS_XY = 3) holds 481
cells, so `min_pts` cannot reach above 255 there.

## L2 Mono and the shower position

`l2_local` confirms the event when the TDSCAN output frame holds any flower
(`mono`). It then computes the **barycenter** of the set flowers of that first
confirming frame: the sums of their `q` and `r` divided by their number. The
result is rounded to the nearest flower (half away from zero). The two
divisions run bit-serially in parallel. The Local L2 trigger, a one-cycle
`trig.valid` with the position, follows the TDSCAN frame by `ABS_W + 5`
cycles. For R = 19 that is 20 cycles (`ABS_W = clog2(NF*R+1) = 15`).

A shower keeps TDSCAN busy for several frames, but it should give a single
trigger. After a trigger the block waits for a valid frame with no flower set
before it triggers again. Frames that arrive during a division are ignored.

## Topo-Stereo coincidence

`topo_stereo` keeps the latest Local L2 trigger of this camera and of each of
the three other telescopes, each with an age counter. A record expires when
its age passes `window` cycles. The stereo trigger fires while the local
record is live and at least `MIN_TELS - 1 = 1` remote record is live and, with
`topo_en`, agrees in position. Agreement means the remote position plus that
telescope's offset (`off_q`, `off_r`) lies within `tol` flowers (lattice
distance) of the local position. Two triggers therefore coincide when their
arrival times differ by at most `window` cycles, in either order. Firing
consumes the local record, so one local trigger gives at most one stereo
trigger. `coinc_mask` tells which telescopes agreed.

The proposal only states the principle: a shower seen in one telescope
predicts where it appears in the others. The constant per-telescope offset
with a tolerance is the simplest predictor. A real system would derive the
expected offset from the pointing and the array layout, and might make it
depend on the position. That would replace the offset inputs with a lookup.

## Central trigger processor and readout

`camera_trigger_ctrl` is a four-state machine: `IDLE`, `WAIT_GH`, `RELEASE`,
`READOUT`.

- With `gh_en` low, every stereo trigger becomes a camera trigger.
- With `gh_en` high, the controller pulses `gh_req`. An external gamma/hadron
  classifier answers with `gh_valid` and an 8-bit `gh_score`. A score of at
  least `gh_cut` releases the data, and a lower score drops the event. No
  answer within `gh_timeout` cycles also drops it.

The release pulse (`camera_trigger`) starts all ring buffers at once. The
controller waits until they are idle. Stereo triggers that arrive meanwhile
are dropped and counted (`n_dropped`), as are the other outcomes.

`ring_buffer` (one per board, 49 channels × 14 bits, 1024 samples deep)
writes every sample. On release it reads out 75 consecutive samples, oldest
first, starting `lookback` samples before the sample written in the release
cycle. It reads one sample per clock, the same rate as it writes, so the
window cannot be overwritten while it is read. The read data appear one clock
after the release, with `rd_idx` 0..74. `lookback` must cover the trigger
path: about 27 cycles from a shower sample to its Local L2 trigger, plus the
wait for the remote trigger, plus any g/h wait. With 1024 samples (1 µs at
1.024 GHz) it can reach back up to 1022 samples.

## Top level and timing

`advcam_trigger` wires the chain in one clock domain, one ADC frame per clock.
Its ports are plain signals, arrays and the packed struct `trig_info_t`
(`valid`, signed `q`, `r`):

- `adc[7987]`: pixel samples.
- Run-time configuration: `l1_threshold`, `min_pts`, `coinc_window`,
  `topo_en`, `topo_tol`, `topo_off_q/r[3]`, `gh_en`, `gh_cut`, `gh_timeout`,
  `readout_lookback`.
- `l1_frame`, `l1_any`, `l2_frame`, `l2_mono`: the intermediate trigger
  results.
- `local_trig`: sent to the other telescopes. `remote_trig[3]`: received from
  them.
- `stereo`, `coinc_mask`.
- `gh_req`, `gh_valid`, `gh_score`: the external classifier.
- `camera_trigger`, `ro_valid`, `ro_idx`, `ro_data[163][49]`: the readout.
- Event counters.

| step | cycles after the shower sample (defaults) |
|---|---|
| L1 frame | 2 |
| TDSCAN output | 7 |
| Local L2 trigger with position | 27 |
| stereo | 1 after the later of local and remote trigger |
| camera trigger (no g/h) | 1 after stereo |

Reset is synchronous and active low. Every register that is read is reset,
except the ring-buffer memory, whose contents are only read after they have
been written.

## Where this departs from the proposal

- **One clock.** The proposal runs L1 at the 1 GHz sample rate and quotes
  TDSCAN at 350 MHz on an FPGA, with a 1 GHz version in development. Here
  everything takes one frame per clock. Crossing between the boards and the
  trigger processor, and the links between them, are not modelled.
  Super-flower sums that span two boards are formed centrally.
- **Time window.** The proposal's summary speaks of a Level 2 window of
  about 10 ns. The default `EPS_T = 1` (the setting with a published latency)
  spans 3 frames, about 3 ns at 1.024 GHz; `EPS_T = 5` spans about 10.7 ns.
- **Camera outline.** A hexagon of 1141 flowers instead of the unpublished
  real outline. The text quotes 1171 flowers.
- **Binary waveform.** The proposal's flow diagram draws the binary waveform
  from the 7-pixel flower sums. The text derives the per-flower L1 signal from
  the 49-pixel sum, and that is what is built.
- **Chosen here, not specified in the proposal:** strict comparisons
  (`>` for L1 and TDSCAN, `>=` for the g/h cut), the barycenter of the first
  confirming frame as shower position, the re-arm rule, the coincidence-window
  mechanics and constant-offset topology, the g/h handshake and timeout, the
  ring-buffer depth and lookback, the dead time during readout, and all
  widths of configuration inputs.

## What is not here

- SiPMs and ADCs: analog. Their samples are the `adc` input.
- The CNN-based Local L2 trigger and the g/h classifier: their networks and
  weights are not given. `l1_any`, `l1_frame` and the `gh_*` handshake are the
  ports where they would connect.
- The Level 3 trigger: software in the data-acquisition cluster.
- Exact DBSCAN: TDSCAN is the streaming hardware form that is built.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares against a
model written independently in the testbench, with its own coordinate tables,
and prints `TB_RESULT checks=N failures=M`. A watchdog ends each run.

- `tb_flower_sum`: random and full-scale inputs.
- `tb_l1_trigger`: radius-3 camera. Every patch sum and L1 bit, `l1_any`,
  edge flowers, 2- and 3-cycle latency.
- `tb_tdscan`: radius-3 camera, (EPS_T, EPS_XY) = (1,1) and (2,2). Every
  output bit against a brute-force 3D count, latency 5 and 6 cycles.
- `tb_l2_local`: bursts of random clusters. Mono flag, count, one trigger per
  burst, rounded barycenter, 12-cycle latency for radius 3.
- `tb_topo_stereo`: directed cases (inside and outside the window, position
  mismatch, topology off) and 3000 cycles of random traffic against a
  cycle-accurate reference. The configuration changes only after a quiet
  gap, since an expired record stays expired if the window is later widened.
- `tb_ring_buffer`: full-size board. Several lookbacks including the largest,
  every word, timing, and a release ignored while busy.
- `tb_camera_trigger_ctrl`: release timing, g/h accept (score equal to cut),
  reject, timeout, dead-time drop, counters.
- `tb_advcam_trigger`: the whole camera at default parameters (1141 flowers,
  163 boards). Synthetic showers of 19 flowers over 3 samples on pedestal plus
  noise. It checks the L1 bits around the shower, that a shower gives exactly
  one Local L2 trigger at its centre, with the latency of the L1, TDSCAN and
  L2 Mono path, stereo with a matching remote telescope,
  topological rejection, window expiry, g/h reject, accept and timeout, and a
  dead-time drop. Every readout word of all 7987 channels is compared with the
  recomputed input. Each of these mechanisms must occur at least once.

The testbenches have only been run with synthetic showers. Real shower data
and the trigger-efficiency numbers of the proposal have not been reproduced.

To run one with Verilator 5 (`-y rtl` lets it find the modules a testbench uses):

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/advcam_pkg.sv \
          tb/tb_tdscan.sv --top-module tb_tdscan -Mdir obj_tdscan
./obj_tdscan/Vtb_tdscan
```

The full-camera testbench takes a few minutes to compile and under a second
to run. To explore other sizes, change `R`, `EPS_T`, `EPS_XY`, `DEPTH` or
`WINDOW` on `advcam_trigger`, or `CAM_R` in `advcam_pkg` for the whole
design. The testbenches of the sub-blocks set their own small sizes.
