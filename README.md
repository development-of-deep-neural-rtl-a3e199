# A neural-network 3D track trigger for the Belle II drift chamber

This RTL takes a charged track that has been found in the transverse plane
by the first-level (L1) trigger, and returns the track's longitudinal vertex
position z0 and polar angle theta0. It also returns a score Q that separates
tracks from the interaction point from beam background. The track arrives as a
2D Hough-finder track: a direction phi0 and a curvature omega. The trigger
looks up the drift-chamber track segments (TSs) that lie along that track,
turns them into 71 numbers, and runs a small quantised neural network on
them: a feed-forward block, a self-attention step, a second feed-forward
block, and tanh outputs. A track is kept when |z0| and Q pass fixed cuts.

The pipeline accepts a new 2D track every 4 clocks. With the 127.216 MHz
trigger clock, that is the 31.8 MHz rate at which the chamber delivers data.
The 3D track appears 40 clocks (314 ns) after the 2D track, which is well
inside the 80-clock budget that the trigger leaves for this logic.

## Data flow

```
 2D track ─► track2d_decode ─► alpha_calc ─┐
                                            ├─► ts_selection ─┬─► phi_rel_calc ──┐
 TSs (9 SLs) ─► ts_persistor (27 clocks) ──┘                  ├─► drift_time_calc ├─► input_scaling ─► dnn_core ─► cut ─► 3D track
 event time ─► t0_shift_reg ──────────────────────────────────┘                  │        ▲
                                                               └─► nn_selection ──┴────────┘ (enable, expert)
```

| clock after the 2D track | stage |
|---|---|
| 1 | `track2d_decode`: Hough cell indices become phi0 and omega (cell centres) |
| 2 | `alpha_calc`: for each of the 9 super layers (SLs), the crossing angle alpha = asin(R·omega/2) and the crossing azimuth phi0 − alpha |
| 3 | `ts_selection`: searches all 9 × 27 stored segments and picks one per SL |
| 4 | `phi_rel_calc`, `drift_time_calc`, `nn_selection` |
| 5 | `input_scaling` registers the 71 features; the network is enabled |
| 6–39 | `dnn_core`: 34 clocks, which is 6·GROUPS + 10 |
| 40 | output register with the selection cut |

`dnn_track_trigger` is the top. It holds a delay line that carries phi0 and
omega alongside the network, so the 3D track leaves with its 2D parameters.

## Finding the segments of a track

Segments arrive spread over many clocks. Drift times are long and the 2D
finder is slow, so `ts_persistor` keeps every segment for 27 clocks: a shift
register of depth 27 per SL, with all taps visible. When a 2D track arrives,
`ts_selection` tests every tap of every SL in one clock.

A segment is a candidate when all of these hold:

* it is valid;
* its drift direction (left/right) is known;
* the track reaches the SL's radius;
* its priority wire lies within ±DPHI of the track's crossing azimuth.

Among the candidates, the one with the shortest priority drift time wins. On a
tie, the most recently stored one wins. Stereo wires are skewed, so the
windows are wider in stereo SLs (240–400 angle units) than in axial SLs
(43–100 units). The circle has 8192 units.

`nn_selection` counts the stereo SLs (1, 3, 5, 7) that yielded a segment:

* 4 found: the track uses expert 0.
* 3 found: experts 1–4 cover SL1, SL3, SL5 or SL7 missing.
* Fewer than 3 found: the track is dropped and `track_rejected` pulses.

The event time t0 comes from a separate finder. It passes through a 4-stage
shift register, and the latest value is held until the next one arrives.

## The 71 input features

Per SL, in SL order, every SL contributes three features:

* phi_rel: the crossing azimuth minus the priority wire's azimuth, divided by the SL window, so it lies in (−1, 1). The wire's azimuth is taken as id·2π/N, its nominal position at the backward endplate;
* the priority drift time t − t0 over 256 (×2 ns), negated for a left-drifting segment;
* alpha, divided by a quarter turn.

Each stereo SL adds eleven more features: the drift time of each wire of the
segment. These times have 32 ns resolution, are scaled by the same 1/256, and
are −1 when the wire has no hit. That gives 5·3 + 4·14 = 71 features. An SL
without a segment contributes zeros and −1s.

Drift times are taken modulo the 9-bit, 1.024 µs window as signed differences.
A negative difference is clamped to 0.

## The network

```
x[71] ─► Linear 71→27 ─► LeakyReLU ─► Linear 27→27 ─┬─► Linear W_w ─► softmax ─┐
                                                     └─► Linear W_v + b_v ──────⊙─► Linear 27→27 ─► LeakyReLU ─► Linear 27→3 ─► tanh ─► z0, theta0, Q
```

The attention is the light form `softmax(x·W_w) ⊙ (x·W_v + b_v)`, one weight
per feature rather than query/key products. The multiply-accumulate count is
as follows:

* the six matrices give 71·27 + 4·27·27 + 27·3 = 4914 MACs;
* the attention product adds 27;
* the two LeakyReLUs add 54.

The total is 4995 MACs per track.

### Quantised arithmetic

Activations are 16-bit Q6.10. The three outputs are 13-bit Q1.12.

Each output node o of a layer has:

* int8 weights q;
* a zero point z (Q8.8);
* a scale s (unsigned 0.16);
* a bias b (Q6.10).

`linear_layer` computes

    y[o] = sat16( (s[o] · (256·Σ q[o][i]·x[i] − z[o]·Σ x[i])) >>> 24 + b[o] )

This equals Σ (q − z)·s·x + b, the dequantised product, without ever forming
q − z per weight. The sum Σx is shared by all nodes.

### Time multiplexing

The inputs of a layer are split into 4 groups, and one group is multiplied
per clock. A layer therefore needs ceil(IN/4)·OUT multipliers, 1263 in total,
and accepts one vector every 4 clocks. Its result appears 5 clocks after its
input. This reuse of every multiplier four times is what makes the network
fit the FPGA's 1560 DSPs at the 4-clock track rate. An assertion flags
vectors that arrive faster.

### Non-linear functions

The non-linear functions are tables computed during elaboration from `$exp`,
`$tanh` and `$asin`, so no data files are needed:

| function | table | range | rounding |
|---|---|---|---|
| tanh | 1024 entries | [−4, 4), ±1 beyond | largest error 0.004 |
| asin (for alpha) | 1024 entries | — | — |
| softmax exp | 512 entries of e^(−k/64) | — | — |
| softmax reciprocal | 2048 entries of 1/sum | — | in steps of 1/64 |

The softmax takes 5 stages:

1. maximum;
2. exp of (maximum − x);
3. sum;
4. reciprocal;
5. product.

LeakyReLU uses slope 10/1024 ≈ 0.01.

### Experts and weight loading

Five complete weight sets are held in registers, one per expert, and the
network picks one per track. They are written one word per clock through the
`cfg` port (`wcfg_t` in `dnn_pkg`), which carries:

* `layer` (0–5):
  * 0: FFN1 input;
  * 1: FFN1 output;
  * 2: W_w;
  * 3: W_v;
  * 4: FFN2 hidden;
  * 5: FFN2 output.
* `kind`: weight, zero point, scale or bias;
* `expert`;
* `row` (output node);
* `col` (input index);
* 16 data bits.

W_w has no bias.

## Output

`track_out` (`track3d_t`) holds:

* `valid`;
* z0, theta0 and Q, tanh-scaled Q1.12;
* the expert used;
* phi0 and omega;
* `pass`.

`pass` is set when −Z_CUT < z0 < Z_CUT and Q < Q_CUT. The defaults are 2048
(0.5) and 3277 (0.8). This corresponds to |z0| < 50 cm if the z0 output
spans ±100 cm, and to Q < 0.8, where Q is −1 for tracks from the interaction
point.

## What follows the published trigger and what is this design's own

Taken from the published design:

* the block structure;
* the 27-clock segment store;
* the shortest-drift-time and known-direction rules;
* the 3-of-4 stereo rule with five experts;
* the 71 features;
* the FFN / attention / FFN network with 27 nodes;
* int8 weights with per-node scale and zero point;
* Q6.10 nodes and Q1.12 outputs;
* 4 input groups per layer;
* the 4-clock rate and the 80-clock budget;
* the output cuts.

Chosen here, where the published description says nothing:

* The formats of the input words: the 2D track as Hough cell indices on a 160 × 34 grid, and segments with a 9-bit wire id, a 9-bit 2 ns time, a 2-bit direction and eleven 5-bit 32 ns wire times.
* Detector constants: wire counts and radii of the priority layers per SL, from the public chamber layout. They are parameters.
* The search window widths, and using the same search for axial SLs.
* The formats of scale and zero point, the table sizes, saturation instead of wrap-around, and floor rounding.
* The order of the features within the vector.
* Weights held in loadable registers. The published firmware is generated by high-level synthesis, with the weights built into the logic and part of the multiplications placed in LUTs. This RTL leaves multiplier mapping to synthesis.
* The latency of each stage. The whole is 40 clocks; the published firmware took 593 ns.

The trained weights are not public. The design runs whatever is loaded, and
the testbenches use random weights, so no physics performance is claimed.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.
`tb/dnn_ref_pkg.sv` is an independent integer model of the network, written
from the number formats. The network testbenches compare against it bit for
bit.

`tb_dnn_track_trigger` runs the top at its default sizes. It loads random
weights for all five experts and plays 120 events with decoy segments, then
six tracks back to back at the 4-clock rate. The decoys are:

* an expired segment with a shorter drift time;
* one with unknown direction;
* one with a longer drift time;
* one outside the window.

The testbench checks:

* the 71 features against real-valued values computed from the planted segments;
* the outputs against the reference model;
* the expert, the latency of exactly 40 clocks, the pass flag and the rejects.

It also counts every mechanism and fails if one never occurred.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/dnn_pkg.sv tb/dnn_ref_pkg.sv tb/tb_dnn_track_trigger.sv \
  --top-module tb_dnn_track_trigger
./obj_dir/Vtb_dnn_track_trigger
```

For testbenches that do not use the reference model, leave out
`tb/dnn_ref_pkg.sv`. The full-size run takes well under a second.
