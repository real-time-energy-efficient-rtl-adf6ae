# A pipelined MPPI controller in SystemVerilog

Model Predictive Path Integral (MPPI) control is a sampling-based optimal
controller. At every control step it perturbs a nominal control sequence
`u[0..N-1]` with Gaussian noise `K` times. It rolls each perturbed sequence
through a vehicle model for `N` steps and scores each trajectory with a
quadratic tracking cost. It then moves the nominal sequence towards the
noise of the cheap trajectories:

    u_t <- u_t + sum_k alpha_k w_t^k,
    alpha_k = exp(-J_k/lambda) / sum_j exp(-J_j/lambda)

In software these four phases run one after the other. This RTL instead
makes them a streaming dataflow:

1. noise generation;
2. trajectory rollouts;
3. cost accumulation;
4. exponential weighting with a global reduction, and smoothing of the
   update.

Stages 1 to 3 are replicated `P` times (the "lanes"), and stage 4 is a
`P`-wide reduction. The stages overlap wherever the data dependencies allow:
- The noise for the next iteration is produced while the current one runs.
- Costs are summed while trajectories are still being rolled out.
- Stage 4 collects finished costs while stage 3 is still busy.

The plant is a car with the kinematic bicycle model: state `(x, y, heading,
speed)` and control `(steering angle, acceleration)`. The task is to follow
a path given as a list of waypoints. The target clock is 200 MHz on a Zynq
UltraScale+ device. The default size is:
- `K = 1024` trajectories;
- an `N = 64`-step horizon;
- `P = 4` lanes;
- `M = 256` waypoints;
- one MPPI iteration per control step.

At this size one control step takes 70,338 clock cycles in simulation, which
is 0.35 ms at 200 MHz.

## Block diagram

```
            wp_we/wp_addr/wp_data                     start, x0
                     |                                    |
                     v                                    v
             +---------------+   xref[0..N]   +-----------------------+
             | desired_state |<---------------|    mppi_controller    |--> u_act
             | (stage IV)    |--------------->| (initialise, sequence,|
             +---------------+                |  u_nom[0..N-1])       |
                                              +-----------------------+
   +-----------+  P pairs/clk  +------------+      |  start/done per stage
   | noise_gen |-------------->| noise_bram |      |
   | (stage 1) |               | P banks x  |<-----+-------------------+
   +-----------+               | 2 buffers  |                          |
                               +------------+                          |
                                 |  read port, shared                  |
                   +-------------+-----------------------+             |
                   v                                     v             |
          +-----------------+  rec FIFO  +------------+ cost FIFO  +----------------+
          | rollout_stage   |--(xP)----->| stage_cost |--(xP)----->| control_update |
          | (stage 2)       |            | (stage 3)  |            | (stage 4)      |
          +-----------------+            |  xP lanes  |            +----------------+
                                         +------------+                  | u writes
                                                                         v
                                                                 mppi_controller
```

`mppi_top` wires the blocks together. Every block is in its own file in
`rtl/`. The types, constants and latencies they share are in
`rtl/mppi_pkg.sv`.

## Number formats

Every continuous quantity is signed Q16.16 (`fx_t`), including states,
controls, noise and configuration. Trajectory costs are Q48.16 (`cost_t`,
64 bits), so that a sum over a long horizon cannot overflow. Stage 4
accumulates its weighted noise sums in Q32.32 before dividing.

The transcendental functions use shift-and-add CORDIC units: 20
iterations, internal format Q4.28, one iteration per pipeline stage.

| Unit | Computes | How | Latency (cycles) |
|---|---|---|---|
| `cordic_sincos` | sin, cos | circular rotation, after folding the angle into [-pi/2, pi/2] | 22 |
| `fx_exp` | exp(x) | writes x = q ln2 + r; hyperbolic rotation for e^r, with the shift repeats at 4 and 13; then a shift by q | 23 |
| `fx_ln` | ln(x) | normalises x to m 2^e; hyperbolic vectoring gives ln m = 2 atanh((m-1)/(m+1)); adds e ln2 | 22 |
| `fx_sqrt` | square root | restoring, one result bit per stage | 25 |
| `pipe_div` | quotient | restoring, 24 quotient bits, signed | 26 |

Every unit takes one operand per clock and has no stall input. Each carries
a free-form tag alongside the data, which lets the units be chained without
side FIFOs.

Using fixed point is this design's own decision. The description this design
follows calls for co-designing fixed-point arithmetic, but also names fixed
point as future work, so its number format is open. Against a
double-precision reference fed with the same noise and waypoints, the
controls differ by about 2.5e-5 after three closed-loop steps at reduced
size. At full size the minimum cost differs by about 0.1 %.

## Stage 1: noise generation and the noise memory

Each lane has two `xorshift32` generators (shifts 13, 17, 5) with different
seeds. They feed a `box_muller` unit:
- `R = sqrt(-2 ln U1)` and `Theta = pi * u2`, where `u2` is read as a signed
  fraction;
- the outputs are `R sin Theta` for steering and `R cos Theta` for
  acceleration;
- the two normals are scaled by the configured standard deviations, since
  Sigma_u is diagonal.

`Theta = pi * u2` with a signed `u2` is uniform on [-pi, pi). That has the
same distribution as the textbook `2 pi U2`, and it needs no angle folding.

The noise memory `noise_bram` is split into `P` banks, so that the `P`
lanes can write in the same clock without port conflicts. Trajectory `k`
lives in bank `k mod P` at address `(k div P) * N + t`. This cyclic split
by trajectory means a rollout lane reads only its own bank. Each bank holds
two complete buffers (ping-pong):
- the generator fills one buffer while the other is being consumed;
- a `full` flag per buffer in the controller decides which one is next.

Each bank has one write port and one registered read port, which maps onto
block RAM. At the defaults each bank holds 2 × 256 × 64 words of 64 bits
(8 Mbit in total).

## Stage 2: rollouts, and how the time loop is pipelined

The time loop `x_{t+1} = f(x_t, u_t + w_t)` carries a dependency. The
pipelined `bicycle_step` is `DYN_LAT = 50` cycles deep:
- two CORDICs for the heading and steering angles;
- a divider for `tan(steer) = sin/cos`;
- two update stages.

A single trajectory could therefore issue only one step every 50 clocks.
`rollout_stage` hides the latency by interleaving. Each lane takes a group
of `G = 64` of its trajectories and issues step `t` of all 64 on
consecutive clocks, then step `t+1` of the same group. After 64 clocks the
first result is already back in the lane's state registers. The lane thus
issues one step per clock, as long as `G > DYN_LAT`, which the RTL asserts.
One iteration takes `K * N / P` issue clocks plus the pipeline latency.

Each issued step produces a record `(j, t, x_t, v_t, x_{t+1})` that goes
into a per-lane FIFO (`sync_fifo`, first-word fall-through, depth
`REC_DEPTH`). The dynamics pipeline cannot stop, so issue uses credits. A
step is issued only if every lane's FIFO has room for all the records in
flight plus one. When stage 3 falls behind, the rollouts stall (`ro_stall`)
and nothing is lost.

Steering is clamped to ±1.5 rad before the tangent, and heading is wrapped
into [-pi, pi). Both are this design's choices.

## Stage 3: costs

`stage_cost` takes one record per clock in a three-stage pipeline:
1. the state error against `xref[t]`, with the heading error wrapped;
2. the diagonal quadratic forms `e'Qe + v'Rv`, inlined;
3. accumulation.

A single running sum would create a loop-carried dependency across the
interleaved trajectories. Instead there is one accumulator per interleave
slot (`j mod G`). At `t = N-1` the terminal cost `e_N' Qf e_N` is added and
the total is pushed into the lane's cost FIFO (depth `JDEPTH`). A record is
popped only when that FIFO can take everything already in the pipeline.
Back-pressure therefore travels from stage 4 through stage 3 to stage 2.

## Stage 4: weighting and control update

`control_update` works in three phases, followed by a smoothing step. The first overlaps with the
rollouts.

1. **COLLECT.** Costs are taken from the `P` cost FIFOs round-robin, one per
   clock. They are stored and their running minimum `Jmin` is kept.
2. **WEIGH.** `exp(-(J_k - Jmin)/lambda)` goes through `fx_exp`, one per
   clock. Subtracting `Jmin` keeps the exponentials in [0, 1] without
   changing `alpha`. The weights are stored partitioned like the noise, and
   their sum `S` is formed.
3. **REDUCE.** For each `t`, the `K/P` words of each noise bank that belong
   to `t` are read, `P` per clock. Each is multiplied by its weight and
   summed by a `P`-input adder tree into a Q32.32 accumulator. Two
   `pipe_div` units divide the steering and acceleration sums by `S`, and
   `u_t + du_t` is written back to the controller. This phase takes
   `K * N / P` clocks.

The update is smoothed over time before it is applied. The filter is
causal: it uses only the current step and earlier ones. It is also
incremental: nothing is recomputed over the whole window.
- `du_t` is the average of the raw updates of steps `t-W+1 .. t`, with
  `W = SMOOTH_W = 4`. Near `t = 0` fewer steps are available, and the
  average covers only those.
- A running window sum of the weighted noise sums is kept. At each step
  the newest sum is added and the one leaving the window is subtracted.
- The averaging is folded into the divisor: `du_t = window / (S * count)`.
  This adds one pipeline register and no extra divider.

`SMOOTH_W = 1` turns the filter off.

Stage 4 and stage 2 share the noise memory's read port. The two never need
it at the same time.

## Stage IV (desired state) and the controller

`desired_state` rolls the nominal sequence forward from `x0` without noise.
For each of the `N+1` horizon states it picks the nearest of the `M` stored
waypoints by an exhaustive scan of squared x-y distance. It takes
`(N+1)(M+2) + N(DYN_LAT+1)` cycles, 20,034 at the defaults. The waypoints
are full states `(x, y, heading, speed)`, so a waypoint also sets the
desired heading and speed.

`mppi_controller` works as follows:
- It holds `x0` and `u_nom`, starting from a zero sequence.
- It keeps the noise generator running ahead into the free buffer.
- It runs `MAX_ITERS` iterations in the order: stage IV, then stages 2, 3
  and 4 together.
- It then outputs `u_nom[0]` on `u_act` for one clock.
- It shifts the sequence left by one step, repeating the last control, to
  warm-start the next step.

## Top-level interface (`mppi_top`)

| Port | Dir | Meaning |
|---|---|---|
| `cfg` (`cfg_t`) | in | `dt`, `1/L`, `1/lambda`, the two noise sigmas, diag(Q), diag(Qf), diag(R); quasi-static |
| `wp_we`, `wp_addr`, `wp_data` | in | waypoint load |
| `start`, `x0` | in | begin a control step from the measured state |
| `busy` | out | a control step is in progress |
| `u_act_valid`, `u_act` | out | control to apply, valid for one clock |
| `ng_busy`, `ro_busy`, `ro_stall`, `cu_busy`, `iter`, `jmin`, `wsum` | out | monitoring |

Parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `K` | 1024 | trajectories |
| `N` | 64 | horizon |
| `P` | 4 | lanes |
| `G` | 64 | interleave depth |
| `M` | 256 | waypoints |
| `MAX_ITERS` | 1 | iterations per step |
| `SMOOTH_W` | 4 | window of the update smoothing filter |
| `REC_DEPTH`, `JDEPTH` | 64, 64 | FIFO depths |
| `SEED` | | noise seed |

`K / P` and `N` must be powers of two, and `G` a power of two that divides
`K / P`; `rollout_stage` checks `G` at elaboration.

## Where this design departs from, or adds to, the original

- **Noise partitioning.** The original figure of the noise partitioning
  shows four sub-blocks. Here the split is cyclic by trajectory, so each
  rollout lane reads only its own bank. The bank count `P = 4` is kept.
- **Sizes.** `K`, `N`, `M`, `G`, the FIFO depths and the iteration count
  are not given by the original. The values above are this design's own.
- **Shared definitions.** The vehicle model equations, the diagonal
  weights, the nearest-waypoint search and the warm-start shift are
  standard MPPI practice, chosen here where the original only names the
  parts.
- **Number format.** Fixed point (see above).
- **Smoothing filter.** The original names a causal, incremental temporal
  smoothing filter in stage 4, but not its form. The moving average and its
  window of 4 are this design's choices.
- **Stage IV timing.** Stage IV runs before the rollouts of each iteration
  rather than overlapping them, because the rollout costs need its
  reference states.
- **Host side.** The host processor and the vehicle itself are outside the
  RTL. The testbenches model the vehicle.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv`. It compares
the block against values computed independently in real arithmetic, checks
the latency, and ends with a line
`TB_RESULT checks=<n> failures=<m>`. The shared real-valued models are in
`tb/tb_mppi_ref_pkg.sv`. They are:
- the bicycle model;
- the Box-Muller transform;
- the quadratic costs;
- one full MPPI iteration in double precision.

With plain Verilator 5:

```
verilator --binary --timing --assert -Irtl \
    rtl/mppi_pkg.sv tb/tb_mppi_ref_pkg.sv rtl/*.sv tb/tb_rollout_stage.sv \
    --top-module tb_rollout_stage
./obj_dir/Vtb_rollout_stage
```

`tb_mppi_top` runs the whole design closed-loop for three control steps at
a reduced size: `K=256`, `N=8`, `P=2`, `M=64`, two iterations per step,
small cost FIFOs. It checks every control against the reference iteration.
It also counts the mechanisms and fails if any never happens:
- rollout stalls;
- cost-stage holds;
- noise generation overlapping other stages;
- buffer swaps;
- iterations.

`tb_mppi_tracking` drives a behavioural car around five generated closed
tracks, from four start points each. Every run lasts 120 control steps
(6 s of driving) at `K=256`, `N=16`, `P=4`, `M=128`. It requires a mean
distance to the path under 0.5 m, a largest distance under 1.5 m, and real
progress along the track. In every run the mean distance is about 5.5 cm,
and a control step takes 5,642 cycles (28 µs at 200 MHz). The run takes
about three minutes.

`tb_mppi_top_full` runs one control step with every parameter at its
default, on an arc of 256 waypoints. It takes about 45 s in Verilator.
