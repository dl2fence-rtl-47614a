# DL2Fence in RTL: CNN-based flooding-DoS detection and localization for mesh NoCs

A flooding denial-of-service (FDoS) attack on a network-on-chip is a node that
injects legitimate-looking packets towards a victim at a high rate. The packets
follow the normal XY routing. So they leave a visible trace in the routers
along their path: the virtual channels (VCs) of the input ports they cross fill
up, and those buffers are written and read far more often than elsewhere.

DL2Fence treats the per-port statistics of the whole mesh as images. A
router's input port is named after the side it faces: east, north, west or
south. So every statistic gives four *directional frames*, one pixel per
router. Two small CNNs then work on these frames:

* a **detector** classifies the VC-occupancy (VCO) frame of each direction as
  normal or abnormal;
* a **localizer** segments the buffer-operation-count (BOC) frame of every
  abnormal direction into a mask of flooded routers.

Fixed logic takes over after the CNNs:

* **Multi-frame fusion** pads each mask back to the full mesh and ORs the
  masks into one victim map.
* An optional **victim completion** step redraws the attack route with XY
  routing.
* A **table-like method** reads off the attacker IDs. It uses the directions
  that are hit and the smallest and largest victim ID in each.

Only one detector and one localizer serve the whole mesh. The only hardware
inside the routers is a set of port counters. This is why the overhead
shrinks as the mesh grows.

This RTL implements the complete framework for an R x R mesh (R = 16 by
default). That covers the port monitors, both CNN accelerators with loadable
weights, the BOC normalizer, the fusion, the victim completion, the attacker
table and the round sequencer. The NoC itself and the trained weights are not
part of it.

## Block diagram and data flow

```
 router ports ──► feature_monitor ──VCO frames──► cnn_detector ──flags──┐
 (vc_occ,          (VCO, BOC per port,                                   │
  buf_wr, buf_rd)   snapshot on sample)                                  ▼
                          └──BOC frames──► boc_normalizer ─► cnn_localizer ─► mask store
                                                                         │
          dl2fence_ctrl sequences every step                             ▼
                                         mff_fusion ─► vce_xy ─► tlm_locator ─► results
```

| File | Role |
|---|---|
| `rtl/dl2f_pkg.sv` | widths, fixed-point helpers, direction enum, pixel-to-node mapping, single-attacker test |
| `rtl/feature_monitor.sv` | per-port BOC counters and VCO ratio; snapshot into 4 frames |
| `rtl/boc_normalizer.sv` | divides a BOC frame by its maximum (serial divider) |
| `rtl/cnn_detector.sv` | conv 3x3x8 + ReLU, 2x2 max-pool, flatten, dense, sign test |
| `rtl/cnn_localizer.sv` | three 3x3 'same' convolutions 1→8→8→1, binarized |
| `rtl/mff_fusion.sv` | zero padding, OR-fusion, per-direction min/max victim ID |
| `rtl/vce_xy.sv` | victim completion by XY route drawing |
| `rtl/tlm_locator.sv` | attacker table |
| `rtl/dl2fence_ctrl.sv` | round sequencer |
| `rtl/dl2fence_top.sv` | the whole framework |

## Frames, node numbering and the missing border ports

Nodes are numbered `id = y*R + x`. The east neighbour of a node is `id+1` and
the north neighbour is `id+R`. The attacker table is written in this
numbering: a flood arriving at east ports comes from `Max(E)+1`.

Routers on the mesh border have no port towards the outside. For example, the
routers in the last column have no east input. So every directional frame has
(R-1) x R pixels. The layout used throughout (`dl2f_pkg::pix2node`) is:

| frame | pixel row r | pixel column c | zero padding restores |
|---|---|---|---|
| E | x = r (0..R-2) | y | right column x = R-1 |
| W | x = r+1 | y | left column x = 0 |
| N | y = r (0..R-2) | x | top row y = R-1 |
| S | y = r+1 | x | bottom row y = 0 |

The E and W frames are stored transposed. This lets one CNN shape, (R-1) rows
by R columns, serve all four directions. Weights trained on untransposed E/W
frames would need the same transposition.

## Feature monitor

For each existing input port the monitor counts buffer writes plus reads. On
a one-cycle `sample` pulse it copies two values of every port into frame
registers:

* **VCO** = occupied VCs / NUM_VC, as Q8.8 in [0, 1]. This is an
  instantaneous value.
* **BOC** = the count since the previous sample. The counter saturates at
  2^BOC_W − 1 and restarts after each sample.

BOC_W = 20 bits holds a 100 000-cycle window at two operations per cycle.
The frames stay frozen during the round, so the CNNs see a consistent
snapshot while traffic goes on.

## The two CNN accelerators

Both accelerators use signed Q8.8 numbers for activations and weights. Each
accumulates exact products in 40 bits and then rescales with an arithmetic
shift and saturation (`sat_act`). Each has nine multipliers, which evaluate
one full 3x3 window of one input channel per cycle. Weights are written
through a simple `we/addr/data` port. The address maps are given in each
file's header.

**Detector** (`cnn_detector`), for R = 16:

```
15x16x1 ─conv3x3 valid, 8 kernels, ReLU─► 13x14x8 ─maxpool 2x2/2─► 6x7x8 ─flatten─► 336 ─dense─► 1
```

The convolution pass writes a feature buffer. The dense pass reads it back,
does the 2x2 max-pool on the fly and accumulates one product per cycle. The
output sigmoid is never computed: sigmoid(z) > 0.5 is the same as z > 0, so
`dos = (z > 0)`, and `logit` gives z. A frame takes 8·13·14 + 336 + 2 = 1794
cycles from `start` to `done`.

**Localizer** (`cnn_localizer`):

```
15x16x1 ─conv3x3 same, 8, ReLU─► 15x16x8 ─conv3x3 same, 8, ReLU─► 15x16x8 ─conv3x3 same, 1─► 15x16 mask
```

Layers 2 and 3 loop over the eight input channels and keep the partial sum in
`acc`. A frame takes 80·P + 1 cycles (P = 240 pixels), that is 19 201 cycles.

The **BOC normalizer** first finds the frame maximum. It then computes
`floor(v·256/max)` for every pixel with a restoring divider that yields one
bit per cycle. That takes P·(FRAC+2) + 1 = 2 401 cycles at R = 16.

## Fusion, victim completion and the attacker table

These three blocks are combinational. The top latches their outputs when a
round ends.

**Fusion.** Each stored mask is mapped back to node IDs and ORed into the
victim map (bit n = node n). The same pass gives `dir_hit[d]` and the extreme
IDs `Min(d)` and `Max(d)` of each direction.

**Victim completion (VCE)** can be switched on with `vce_en`. It acts only on
patterns that the table classifies as a single attacker. It takes the victim
next to the attacker as a pseudo source:

* `Max(E)` if E is hit, else `Min(W)`, else `Max(N)`, else `Min(S)`.

It takes the end of the route as the target victim:

* `Min(N)` if N is hit, else `Max(S)`, else `Min(E)`, else `Max(W)`.

It then ORs in the X-then-Y route between the two. A router that the
segmentation missed, for instance a port with weak counts, is restored. The
target victim ID is reported whenever the pattern is single-attacker.

**Table-like method (TLM).** Under XY routing a flood first travels along the
attacker's row and then along the victim's column. A flood that enters
victims through their east ports must come from the node just east of the
largest such victim. The table lists every combination of hit directions:

| hit frames | attackers reported | attackers expected |
|---|---|---|
| E / N / W / S alone | Max(E)+1 / Max(N)+R / Min(W)−1 / Min(S)−R | 1 |
| E or W, plus N or S | Max(E)+1 or Min(W)−1 | 1 if the N/S victims share a column and the E/W victims span < R−1 IDs, else ≥ 2 |
| E & W | Min(W)−1, Max(E)+1 | ≥ 2 |
| N & S | Min(S)−R, Max(N)+R | ≥ 2 |
| E & N & W | Max(E)+1, Min(W)−1 | ≥ 2 |
| E & W & S | Max(E)+1, Min(W)−1, Min(S)−R | ≥ 2 |
| E & N & S | Max(E)+1, Max(N)+R, Min(S)−R | ≥ 2 |
| W & N & S | Min(W)−1, Max(N)+R, Min(S)−R | ≥ 2 |
| all four | Max(E)+1, Min(W)−1 | ≥ 2 |

When two or more attackers are expected, `multi_attacker` is set. Attackers
that the table cannot name in one round are found in later rounds, each of
which sees a different traffic snapshot.

## Rounds and timing

`dl2fence_ctrl` runs rounds:

1. **Sample.** Freeze the frames and clear the mask store.
2. **Detect.** Run the detector on the E, N, W and S VCO frames.
3. **Localize.** For each abnormal direction, in E, N, W, S order, normalize
   its BOC frame, segment it and store the mask.
4. **Report.** Pulse `result_valid`. All result outputs hold until the next
   report.

A round that finds nothing waits until `period` cycles have passed since its
sample. A round that finds an attack is followed at once by a new sample.
This repeats until the mesh is quiet again.

Cycle counts at R = 16:

| round | cycles |
|---|---|
| quiet | about 7 200 |
| + each abnormal direction | about 21 600 |
| single-attacker L-shaped route (two directions) | about 50 000 |
| worst case (four directions) | about 94 000 |

At 2 GHz these are 3.6 µs to 47 µs. So a 100 000-cycle sampling period (as
used for PARSEC-like workloads) is always met. A 1 000-cycle period is not:
sampling then simply runs at the round rate, about one sample every 7 200
cycles while quiet.

## Interface of `dl2fence_top`

| port | meaning |
|---|---|
| `vc_occ[node][dir]` | occupied VCs of that input port (0..NUM_VC) |
| `buf_wr[node][dir]`, `buf_rd[node][dir]` | one pulse per flit written / read |
| `enable`, `period`, `vce_en` | start monitoring; cycles between samples; VCE on |
| `det_wt_we/addr/data`, `loc_wt_we/addr/data` | weight load ports |
| `result_valid` | one-cycle pulse at the end of each round |
| `dos_detected`, `abn_dirs`, `seg_dirs` | any abnormal frame; detector flags; directions with victims |
| `victims` | R·R-bit victim map after VCE |
| `tv_valid`, `tv_id` | target victim of a single-attacker pattern |
| `attacker_id[3]`, `attacker_valid`, `multi_attacker` | table result |
| `vce_applied`, `busy` | status |

The direction index is E = 0, N = 1, W = 2, S = 3.

The top carries assertions for the internal handshake. A unit may be started
only while it is idle, and at most one of detector, normalizer and localizer
runs at a time. Simulate with `--assert` to have them checked.

Load the weights before setting `enable`. The weight memories are not reset.

## What follows the source description and what is this design's own

These parts follow the published description of the method:

* the two-CNN structure and the layer sequence of both networks;
* 8 kernels per layer;
* all the feature-map shapes;
* the VCO and BOC definitions;
* binarization, zero padding and fusion;
* the VCE idea of redrawing an XY route from a pseudo source to the target
  victim;
* every entry of the attacker table;
* the round flow.

Two further points were read off the published layer shapes. The detector's
3x3 kernel follows from 15x16 → 13x14. Its 2x2/2 pooling follows from
13x14 → 6x7.

These are choices of this implementation:

* **Numbers and schedule.** The Q8.8 fixed-point format and the serial
  one-window-per-cycle schedule. The original accelerators are described only
  as using "three convolutional kernels in a pipeline"; their exact
  organisation is not known.
* **Detector input.** The detector classifies each directional VCO frame
  on its own, as a one-channel image. This gives one flag per direction,
  which the localizer and the attacker table need. The source description
  speaks of four frames as the detector's input, but gives the input shape
  as a single channel.
* **Localizer layers.** The 3x3 kernels, the hidden ReLUs and the output
  sigmoid.
* **Thresholds.** Both CNN outputs are binarized at 0.5.
* **Normalization.** BOC is divided by the frame maximum.
* **BOC window.** Counts are taken per sampling window.
* **Mesh defaults.** NUM_VC = 4 and BOC_W = 20.
* **Frame layout.** The E/W transposition.
* **Fusion.** Masks are combined by OR rather than summed.
* **VCE choices.** The rules for choosing the pseudo source and the target
  victim, and applying VCE only to single-attacker patterns.
* **Abnormal direction.** For the table, a direction counts as abnormal when
  its mask holds victims.
* **Sequencing.** The handshakes, and resampling at once after an attack
  round.

Trust level:

* Every block is checked against an independent reference model in its
  testbench.
* The whole framework is checked end to end at R = 16.
* The CNNs have only been exercised with random weights and with hand-made
  threshold weights. No trained weights were available. So the accuracy
  figures of the method (about 96 % detection and 92 % localization accuracy
  on synthetic traffic at 16x16) are not reproduced by anything here.

## Configurations

* **16x16 mesh with synthetic traffic.** This is the default configuration.
* **8x8 mesh, used for PARSEC-like workloads.** Needs `R = 8`. All blocks are
  parameterized by R. The detector's pooled size becomes
  floor((R−3)/2) x floor((R−2)/2) and its dense-weight count changes to match.
  `tb/tb_dl2fence_top_r8.sv` runs the end-to-end scenarios on such an
  instance.
* **Other sizes.** Overhead figures for the method were also reported at
  R = 4 and R = 32.
  * R = 32 elaborates with the same parameter. It has been linted, not
    simulated.
  * R = 4 is too small for this detector. Its 1x2 convolution map leaves
    nothing after 2x2 pooling. The smallest usable mesh is R = 6, and a
    4x4 mesh would need a different network shape.

## Simulation

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

Two helpers live in `tb/`:

* `flood_path.sv` generates XY flood routes and the ports they hit.
* `tb_dl2fence_top` drives the full 16x16 framework with background traffic
  and floods. It covers a quiet round, single attackers, a port with weak
  counts with VCE off and on, two attackers from opposite sides, and the
  return to quiet. It counts each mechanism, and one that never happens is a
  failure. It runs about 500 000 cycles, in under a minute with Verilator.

Example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/dl2f_pkg.sv \
          tb/tb_dl2fence_top.sv --top-module tb_dl2fence_top -o sim
./obj_dir/sim
```

The same command with another `tb_*` name runs a unit test. The testbenches
use only `$urandom` for stimulus.
