# NN track finding in logic: next-hit prediction, candidate scoring and overlap removal

A charged particle crossing a silicon tracker leaves one hit per detector layer.
Track finding has to pick, out of many hits per layer, the ones that belong to
the same particle, and do it fast enough for a hardware trigger. The usual tool,
a Kalman filter, needs matrix inversions and a stored map of the magnetic field
and detector geometry at every step. The approach implemented here replaces it
with two small neural networks:

* an **extrapolator** network that looks at the three most recent hits of a
  partial track and predicts where the next hit should be; every real hit
  close enough to the prediction extends the track (one new candidate per
  hit), and the step repeats layer by layer;
* a **fake-rejection** network that gives each finished candidate a score; a
  cut on the score removes fakes, and among candidates that share most of
  their hits only the best-scored one is kept ("hit-warrior" overlap removal).

Both networks are small multilayer perceptrons built fully parallel, one
multiplier per weight, so each prediction takes a few clock cycles and a new one
can start on every clock. This RTL builds the networks and the loop around them:
the hit store, the window search, the branching search, the pre-processing for
the second network, and the overlap removal. The approach follows the study
"Charged Particle Tracking with Machine Learning on FPGAs" (Abidi et al.). The
RTL is an independent implementation, not the authors' code. The published work
describes the algorithm and the network shapes and reports FPGA latency and
resources for the two networks. Everything in between here is this design's own
choice, and the places where that happens are listed below.

## The data path

```
 hits ──► hit_memory (10 layers x 64)          seeds (3 hits)
              ▲   │ one hit / clock                 │
              │   ▼                                 ▼
              │ window_matcher ◄── prediction ── extrap_controller ◄─► mlp_extrapolator
              │                                     │  (work stack)      14x32x32x32x3
              └──────── reads ──────────────────────┘
                                                    │ finished candidates
                                                    ▼
                                             track_preproc   rotate to phi=0, sort by radius
                                                    ▼
                                               fake_nn        30x32x32x1 -> score
                                                    ▼
                                             hit_warrior      score > 0.5, overlap removal
                                                    ▼
                                          surviving tracks (on flush)
```

`nn_tracker_top` wires these together. One region of one event is processed at
a time:

1. pulse `event_clear`, then write the region's hits with `hit_wr_*`. Each
   write returns the slot it got (`hit_wr_idx`), and (layer, slot) is the hit's
   identifier from then on;
2. offer the seeds on `seed_*` (valid/ready). A seed is three hits on the three
   innermost layers with their identifiers;
3. pulse `event_end` after the last seed. When nothing is left in flight the
   overlap buffer is flushed: the surviving tracks come out on `out_*`
   (valid/ready) as hit-identifier lists with their scores, then `event_done`
   pulses;
4. `stats` counts, per event stream, how often each mechanism fired:
   predictions, branches, both stopping rules, lost branches, fakes,
   duplicates, replacements, buffer overflows and kept tracks.

The network weights are loaded through `ext_cfg_*` and `fk_cfg_*`, one 16-bit
value per clock, before the first event. Trained weights are not part of this
release (see "Weights" below).

## Numbers and coordinates

All arithmetic is signed 16-bit fixed point with 10 fractional bits: range
±32, step 2⁻¹⁰. This is the common default of HLS-generated networks. The
source work tuned the precision layer by layer but does not print the widths.
Hit coordinates use the same format with **1.0 = 1024 mm**, so one LSB is
exactly 1 mm. The barrel (about 1 m radius) is then O(1), which is what the
networks expect, and the search radii of 10, 15 and 20 mm are the exact integers
100, 225 and 400 when squared. If the networks are retrained with a different
input scaling, this is the first thing to revisit (`trk_pkg`).

`dense_layer` computes `y = act(bn(W·x + b))`. It keeps full 32-bit products,
accumulates in 64 bits, truncates back to 10 fractional bits, saturates to 16
bits, then applies an optional per-channel batch-normalisation scale and offset
and the activation. ReLU is a sign test. tanh and sigmoid are 4096-entry tables
computed at elaboration (`act_lut`): tanh over [−4, 4) in steps of 2⁻⁹, sigmoid
over [−8, 8) in steps of 2⁻⁸, both to within about one output LSB. The table
size is not cosmetic. With 1 LSB = 1 mm, a 1024-entry table would step the
predicted coordinate by up to 16 mm, more than the search window.

## The extrapolator network and its inputs

`mlp_extrapolator` is 14 → 32 → 32 → 32 → 3. It has three ReLU hidden layers
and a tanh output, so the prediction stays within ±1024 mm. Its 14 inputs are
the (x, y, z) of the three most recent hits, oldest first, plus a 5-wide one-hot
layer code. The source says only that the inputs carry a one-hot code of
detector volume and layer. Here bit ⌊layer/2⌋ of the last hit's layer is set, so
the code takes 5 bits, which is what 14 − 9 leaves. A retrained network that
uses another encoding needs only the few lines that build `nn_x` in
`extrap_controller` changed.

The source's prose describes the MLP as having two hidden layers. Its table of
models and its per-layer weight plots show four weight layers (three hidden).
The RTL follows the table.

Latency is 8 clocks, 2 per layer, and one input vector is accepted per clock.
At a 200 MHz clock (an assumption: no clock is given) that is 40 ns, within the
reported 50 ns per prediction. The layer has 2592 multipliers, which agrees
closely with the reported use of 21% of the DSP slices of an Alveo U250
(12288 × 0.21 ≈ 2580).

## The extrapolation loop (`extrap_controller`)

This is the part with the most behaviour. A partial track in hand goes through
these steps:

* if its last hit is on the outermost layer, it is finished (**edge stop**);
* otherwise its features go to the network. Eight clocks later the prediction
  comes back, and the controller reads every hit of the **next layer** from the
  hit store, one per clock, through `window_matcher`. This tests
  `dx² + dy² + dz² ≤ R²`, where R is picked by `win`;
* each matching hit makes a copy of the track extended by that hit, which is
  pushed on a work stack. One match continues the track; several make
  **branches**;
* if no hit matched, the track is finished as it stands (**no-match stop**).

The stack is popped before a new seed is taken, so the search is depth first.
At any time the stack holds the untried siblings along one path, not a whole
tree. A branch that finds the stack full (32 entries by default) is dropped and
counted (`stack_overflow`). Finished tracks of any length go on to scoring.
A minimum-length requirement appears in the source only as an evaluation cut.
In practice the fake network does that job, since short tracks have empty
slots.

Choices made here and not in the source: searching only the next layer (the
barrel has one hit per layer per track); the stack and its size; the layer code;
and sending one track at a time through the network. The last choice leaves the
network's pipeline mostly idle. Interleaving several partial tracks would raise
throughput without changing results.

## Candidate pre-processing (`track_preproc`)

The fake-rejection network was trained on candidates that were (1) rotated
about the beam axis so that the first hit is at φ = 0, (2) scaled to O(1), and
(3) ordered by distance from the beam axis, with zero padding up to 10 hits.
Step 2 comes for free from the coordinate format. Step 1 is a CORDIC in
vectoring mode run on the first hit. At each of its 14 micro-rotations the
direction chosen for the first hit is applied to all ten hits at once, so the
whole track turns by the same angle and the angle is never computed. A track
whose first hit has x < 0 is first turned by 180°. One clock then removes the
CORDIC gain (×0.60725). Step 3 is an odd-even transposition sort on ρ² over
10 clocks, with empty slots sorting last. Latency is 27 clocks per candidate.
The residual angle error is below 0.13 mrad, and results agree with an exact
rotation to within 3 mm.

## Scoring and overlap removal (`fake_nn`, `hit_warrior`)

`fake_nn` is 30 → 32 → 32 → 1. Each hidden layer is Dense → BatchNorm → ReLU.
The batch-normalisation layers appear in the trained network's layer list. Their
placement before the ReLU, and the sigmoid output, are choices made here. The
score is shown on a 0–1 scale and cut at 0.5. Latency is 6 clocks. Hit
identifiers travel beside the network in a 6-stage delay line. An assertion
checks that the two stay aligned.

`hit_warrior` keeps up to 64 tracks per event and handles each scored candidate
in a single clock:

* score ≤ 0.5 → dropped as a **fake**;
* it is compared with every kept track: all 10 × 10 identifier pairs, counting
  shared hits. A kept track sharing **≥ 8 hits** is an overlap;
* if any overlapping kept track scores at least as high, the newcomer is
  dropped as a **duplicate**. On a tie the earlier track stays;
* otherwise all overlapping kept tracks are **replaced** and the newcomer takes
  a free slot. If there is none, it is dropped and counted (`kept_overflow`).

The source states the overlap rule in two ways, "share N hits" in the text and
"share more than N hits" in a figure, with N = 8 in the results. The RTL counts
a pair sharing 8 hits as an overlap. Setting `OVERLAP_N = 9` gives the other
reading.

## Weights

The trained weights were never published, so the networks read them from
register banks that are written at run time. An HLS flow would instead fold
constant weights into the logic and remove pruned (zero) weights entirely. Here
a zero weight still has its multiplier. Address maps (row-major, output index
outermost):

* extrapolator: `W1[32][14], b1[32], W2[32][32], b2[32], W3[32][32], b3[32], W4[3][32], b4[3]`.
  There are 2691 values;
* fake network: `W1[32][30], b1[32], s1[32], o1[32], W2[32][32], b2[32], s2[32], o2[32], W3[1][32], b3`.
  There are 2209 values, where `s`/`o` are the batch-norm scale and offset.

To use trained Keras weights, quantise each value to round(v·1024) and write it
in this order. Fold batch normalisation as s = γ/√(σ²+ε) and o = β − μ·s.

## What is not here

* Seeding and hit clustering. The source evaluates the extrapolation with
  seeds taken from simulation truth and describes no seeding hardware, so seeds
  and clustered hits are inputs.
* Whole events. The hit store holds 640 hits, 64 per layer. The source quotes
  about 16000 hits in the central region at the highest pile-up, so an event
  has to be split into regions (φ/η sectors) upstream. How to split it is not
  specified.
* The endcap, and the recurrent and echo-state network variants. These were
  compared in the source but are not the configuration it puts on the FPGA.
  The Hough-transform seeding it compares against is also out.
* Timing closure and resource figures on a real device. The networks here are
  fully parallel as described, but no place-and-route has been done.

## Files and simulation

`rtl/` holds one module or package per file:

* `trk_pkg` – types and constants;
* `act_lut` and `dense_layer` – the layer building blocks;
* `mlp_extrapolator` and `fake_nn` – the two networks;
* `hit_memory`, `window_matcher` and `extrap_controller` – the extrapolation
  loop;
* `track_preproc` and `hit_warrior` – pre-processing and overlap removal;
* `nn_tracker_top` – the top level.

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The reference models are independent: integer
layer arithmetic with floating-point tanh and sigmoid (`tb_nn_ref_pkg`), a
floating-point rotation, and software versions of the search and the overlap
rules.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/trk_pkg.sv tb/tb_nn_ref_pkg.sv tb/tb_nn_tracker_top.sv --top-module tb_nn_tracker_top
./obj_dir/Vtb_nn_tracker_top
```

`tb_nn_tracker_top` runs two synthetic events with a 3-deep stack and a
6-entry overlap buffer, so that every mechanism fires, including both
overflows. `tb_nn_tracker_full` runs the first event at the default sizes. Both
load hand-made weights with a known meaning. The extrapolator computes the
straight-line extrapolation 2·last − previous, using pairs of ReLU nodes for ±v.
The fake network scores tracks with at least 8 hits above 0.5 and prefers the
larger z of the last hit. With these weights the expected surviving tracks can
be worked out exactly. The testbenches check the surviving tracks, the
counters, the latencies (2 clocks per layer, 8 and 6 clocks per network, 27
clocks for pre-processing) and the valid/ready handshakes under random
back-pressure.

Simulation builds take a few seconds to a minute. The fully parallel networks
make yosys synthesis of the two network modules slow, many minutes, while lint
and elaboration are quick.
