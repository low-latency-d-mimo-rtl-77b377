# Daisy-chained particle localizer for panelized distributed MIMO

A mobile agent is seen by J antenna panels spread along the walls of a room. Each panel has
its own channel estimator. That estimator reports a handful of propagation paths per time step:
a distance, an angle of arrival and an amplitude for each. Any of these paths may be the
line-of-sight (LoS) path to the agent, a reflection, or a false alarm. The LoS to a panel may
also be blocked.

The localizer tracks the agent with a particle filter that runs belief propagation over these
measurements. It does not gather every measurement in one place. Instead, a particle cloud
travels along a chain of panels:

- Panel 1 predicts the agent forward in time.
- Each panel weighs the particles against its own measurements and forwards the re-weighted
  cloud to the next panel.
- The last panel outputs the position estimate. It then resamples the cloud and sends it back to
  panel 1 as the prior for the next time step.

Only the particle cloud crosses the links, never the raw measurements. Every panel runs the same
hardware, so adding a panel means adding one more box to the ring.

Each panel also keeps a small private belief about its own LoS:

- the probability that the LoS exists;
- a particle cloud for the LoS amplitude.

That belief is updated as a by-product of the same pass. It decides whether the panel "sees"
the agent.

This RTL implements the per-panel processing unit and a top level that chains J of them. It is
cycle-exact with respect to a simple latency model. One pass over NP particles at a panel with
M measurements takes

    NP/4 * (20 + 2(M-1))  cycles

and a whole time step, from the moment the prior reaches panel 1 to the estimate, takes

    J*NP/4*(20 + 2(M-1)) + (J-1)*L + 2J + 36  cycles

where L is the link latency per hop. It is 174 cycles (0.87 µs at 200 MHz) for the 25G Ethernet
links of the reference system. The default build has J = 24, NP = 4096 and up to 16
measurements per panel. With M = 6 a step takes 741,366 cycles, which is 3.71 ms at 200 MHz.

## The chain and one time step

```
         rx (prior for n)                                   tx (resampled belief for n+1)
  ┌──────────────────┐  link  ┌──────────────┐  link      ┌──────────────────────────┐
  │ panel 0 (first)  │ ─────► │ panel 1      │ ─► ... ──► │ panel J-1 (last)         │ ──┐
  │ motion model     │        │ regularize   │            │ regularize, estimate,    │   │
  └──────────────────┘        └──────────────┘            │ resample                 │   │
           ▲                                              └──────────────────────────┘   │
           └───────────────────────────────── link ──────────────────────────────────────┘
```

`dmimo_loc_top` instantiates J copies of `panel_unit`:

- Panel 0 has `is_first` set. Panel J-1 has `is_last` set.
- The links are not part of the design. Each panel's `tx_*` stream and `rx_*` stream are top
  ports, and the system closes the ring outside.
- A message is NP/4 beats. Each beat holds four particles `{px, py, vx, vy, w}` (640 bits),
  with `tx_last`/`rx_last` on the final beat.
- There is no back-pressure. Every block runs at the rate the chain needs, and a panel is never
  sent a new message while it is still in a pass. An assertion in `panel_unit` checks this.

One time step goes as follows:

1. The system writes each panel's measurements (`meas_we`, `meas_waddr`, `meas_wdata`) and sets
   `meas_count`. This can happen at any time before the message reaches that panel.
2. Panel 0 receives the prior. This is the last panel's resampled cloud, or an initial cloud
   that the system injects at start-up. Two cycles after the last beat, the panel starts its
   pass.
3. During the pass, each group of four particles that is finished leaves on `tx_*` at once. The
   next panel stores the message beat by beat. After the last beat it starts its own pass. So
   panels do not overlap, and each hop adds L + 2 cycles.
4. The last panel ends its pass as follows:
   - It raises `est_valid` with the weighted mean `est = {px, py, vx, vy}`.
   - It resamples its cloud and streams it back to panel 0 with equal weights.
   - This resampling (at most 2·NP cycles) and the return link take place before the next
     step's prior is complete. They are therefore outside the measured step latency.
5. After its own pass, every panel updates its LoS belief in the background:
   - existence probability and detection flag;
   - amplitude estimate;
   - resampling of the amplitude particles.
   It is ready long before the next message arrives.

`step_cycles` on the top measures item 2 through item 4 for the last completed step.

## Inside a panel: the group pipeline

A pass walks over the NP particles in NP/4 groups of four, which are processed in parallel in
four lanes. Each group goes through this chain before the next group is launched:

| Unit | Cycles | What it does per particle |
|---|---|---|
| `agent_pred` | 3 | Panel 0: `p += dt·v + dt²/2·a`, `v += dt·a`, where `a ~ N(0, sig_a²)`. Other panels: add regularization noise `N(0, sig_r²)` to the position and `N(0, sig_rv²)` to the velocity. Both apply the weight renormalization shift. |
| `pa_pred` (in parallel) | 3 | Amplitude random walk `u + sig_u·n` and the existence prediction `p = p_s·p_e + p_b·(1 − p_e)`. |
| `likelihood` | 9 + 2(M−1) | `S = Σ_m L_m(particle)` over the panel's M measurements, one measurement per two cycles. |
| `pa_belief` | 5 | `β = (1 − p_d) + lr_scale·S`, the evidence for this particle under "LoS exists". It also accumulates the panel's LoS sums. |
| `agent_belief` | 3 | `ξ = (1 − p) + p·β`, then `w' = (w·ξ) >> 32`. It also accumulates `Σw'` and `Σw'·x` for the estimate. |

That is 20 + 2(M−1) cycles per group. The groups deliberately do not overlap. Pipelining them
would make the pass about 20 + 2(M−1) times shorter. It would also depart from the latency
model that this design reproduces. `pass_cycles` reports the measured length of each pass.

The agent particle i and the amplitude particle i travel together as one "stacked" particle. The
likelihood therefore sees a position and an amplitude at the same time. This keeps the work
linear in NP·M.

`gauss_noise` supplies 22 fresh N(0,1) samples every cycle:

- 16 for the agent lanes;
- 4 for the amplitude lanes;
- 2 uniforms for the resamplers.

Each sample is a sum of four 16-bit uniforms from xorshift32 generators, centred and scaled.
The panel index is mixed into the seed.

## The likelihood unit

This is the largest unit and the one that departs most from the reference. For particle
position `p`, panel position `p_pa` and measurement `(d, cos φ, sin φ, u_m)`, the residuals are
taken in the frame of the measured bearing:

    dx, dy = p − p_pa
    e_d = cos φ·dx + sin φ·dy − d      radial: distance error
    e_t = cos φ·dy − sin φ·dx          tangential: bearing error times range, in metres
    e_u = u − u_m                      amplitude error
    E   = kd·e_d² + ka·e_t² + ku·e_u²
    L   = exp(−E)

The constants are `kd = 1/(2σ_d²)`, `ka = 1/(2σ_t²)` and `ku = 1/(2σ_u²)`. They are run-time
inputs in `cfg`, so the bandwidth and array size of the radio, which set the measurement noise,
change only these numbers.

The angle arrives as a unit vector, so no trigonometry is needed. The exponential is computed as
`2^(−E·log2 e)`:

- a barrel shift handles the integer part;
- `1 − 0.67157 f + 0.17157 f²` handles the fraction.

This polynomial is exact at f = 0 and f = 1, and its relative error stays under 1 %. Residuals
are squared in 64 bits and saturated, so a far-away particle gets L = 0 instead of wrapping.

Measurements are read from the panel's measurement memory. The read is combinational at
`meas_idx`, and one measurement is read every two cycles. M = 0 (nothing detected) is handled
as one masked slot: S = 0 and the timing of M = 1.

The reference design's likelihood uses divisions, trigonometric functions and erfc. Its exact
form is not published. The Gaussian-in-the-bearing-frame form above is this design's own choice.
It keeps the published timing: one measurement per two cycles and 9 + 2(M−1) cycles of latency.

## Weights, renormalization and the estimate

Weights are unsigned 32-bit integers. Only their ratios matter.

Each pass multiplies every weight by ξ ≤ 1 + lr_scale·S. The product is then shifted right by
32, so the weights shrink with every panel. To keep precision, the receiving panel handles the
weights in block floating point:

1. It ORs the weights of all incoming beats.
2. It takes the count of leading zeros.
3. It shifts every weight left by that amount (`wshift`) in `agent_pred`.

The largest weight of each message therefore starts the pass with bit 31 set.

The estimate is `Σw·x / Σw`. The sums are accumulated in `agent_belief` as the particles
stream past, in 64 bits, with the positions in Q16.16. `estimator` then turns the sums into
quotients with a single shared reciprocal:

1. The denominator is normalized to [2^63, 2^64) by a shift z.
2. A 33-step restoring divider forms `floor(2^95 / den)`.
3. Each numerator is multiplied by that reciprocal and shifted right by 79 − z.

This takes 35 cycles, or 36 cycles to `est_valid`, whatever NP is. The reference model instead
adds log2(NP)/2 adder-tree cycles, which is 6 cycles at NP = 4096. The reference also lists a
3-cycle estimate operation. The same estimator, with one numerator, also computes the
LoS existence probability and the amplitude estimate.

## The LoS belief of each panel

Besides the agent message, each pass leaves three sums in `pa_belief`:

- `A = Σ (w·β) >> 32`, the evidence that the LoS exists;
- `W = Σ w >> 16`, the normalization;
- `U = Σ v·u` with `v = (w·β) >> 32`, the amplitude numerator.

At the end of the pass, the panel computes:

    p_e   = p·A / (p·A + (1 − p)·W')     (A and W brought to the same scale)
    u_hat = U / A
    pa_detected = p_e > p_de

Here p is the predicted existence probability. The amplitude particles are then resampled
systematically with weights v into the second amplitude bank (`umem0`/`umem1` ping-pong). The
predicted amplitudes for the next step are written back during the next pass. `init` resets the
LoS belief to `p_init` with every amplitude particle at `u_init`, which takes NP/4 cycles.

The LoS test signals:

- `pa_exist` is the existence probability.
- `pa_detected` is the flag. It falls when the LoS is blocked and rises again when the LoS
  returns.
- `pa_u_hat` is the amplitude estimate.

## Systematic resampling

`sys_resampler` walks the weights and an output counter together:

- Each cycle it either emits one ancestor index (the running sum has passed the comb tooth
  `U + k·total/NP`) or reads the next weight.
- A run takes NP to 2·NP cycles.
- `total/NP` is a shift, so NP must be a power of two.

It is used twice per panel:

- for the amplitude particles, on every panel;
- for the agent particles, on the last panel only. The resampled particles go straight out on
  `tx_*` with weight 2^31.

## Number formats and configuration

- Every datapath word is 32 bits.
- Positions, velocities, amplitudes and noise are signed Q16.16, giving ±32 km at 15 µm
  resolution.
- Probabilities and the constants `kd`, `ka`, `ku` and `lr_scale` are unsigned Q16.16.
- Accumulators are 64 bits.

All model constants arrive in one packed struct, `loc_pkg::model_cfg_t`:

| Field | Meaning |
|---|---|
| `dt` | time step (s) |
| `sig_a` | acceleration noise std in the motion model (panel 0) |
| `sig_r`, `sig_rv` | position and velocity regularization std (other panels) |
| `sig_u` | amplitude random-walk std |
| `p_s`, `p_b` | LoS survival and birth probabilities |
| `p_d` | detection probability |
| `lr_scale` | LoS to false-alarm density ratio, p_d/(μ_fa·f_fa) |
| `kd`, `ka`, `ku` | 1/(2σ²) of the distance, tangential and amplitude residuals |
| `p_de` | detection threshold (0.5 in the reference system) |
| `p_init`, `u_init` | initial LoS belief |

Top-level parameters:

- `J` (24) is the number of panels, and must be at least 2.
- `NP` (4096) is the number of particles per cloud. It must be a power of two and at least 16.
- `MAX_M` (16) is the number of measurement slots per panel.

Storage per panel at the defaults is:

- 4096 × 160-bit agent particles;
- 3 × 4096 × 32-bit words for the amplitude banks and amplitude weights;
- 16 × 128-bit measurements.

That is about 1.05 Mbit per panel and 25.2 Mbit for 24 panels. All memories are plain arrays
that an FPGA tool maps to block RAM. A generic yosys synthesis of the default top gives about
73k cells besides these memories.

## Files

| File | Content |
|---|---|
| `rtl/loc_pkg.sv` | types, Q16.16 helpers, `model_cfg_t` |
| `rtl/gauss_noise.sv` | parallel Gaussian/uniform noise |
| `rtl/agent_pred.sv`, `rtl/pa_pred.sv` | prediction units |
| `rtl/likelihood.sv` | measurement likelihood sums |
| `rtl/pa_belief.sv`, `rtl/agent_belief.sv` | belief and message update, accumulators |
| `rtl/estimator.sv` | ratio of sums (shared reciprocal) |
| `rtl/sys_resampler.sv` | systematic resampler |
| `rtl/panel_unit.sv` | one panel: memories, controller, all of the above |
| `rtl/dmimo_loc_top.sv` | J panels, step latency counter |
| `tb/eth_link_model.sv` | link model for simulation: a pure L-cycle delay |
| `tb/tb_<unit>.sv` | self-checking testbench per unit |
| `tb/tb_dmimo_loc_top.sv` | end-to-end test: J = 4, NP = 64, 14 steps, blocked LoS, differing M |
| `tb/tb_dmimo_loc_full.sv` | default size (24 panels, 4096 particles), two full steps with M = 2 and M = 6 |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. Each one has a
watchdog. Example with Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal --top-module tb_dmimo_loc_top -Mdir obj \
  rtl/loc_pkg.sv rtl/gauss_noise.sv rtl/agent_pred.sv rtl/pa_pred.sv rtl/likelihood.sv \
  rtl/pa_belief.sv rtl/agent_belief.sv rtl/estimator.sv rtl/sys_resampler.sv \
  rtl/panel_unit.sv rtl/dmimo_loc_top.sv tb/eth_link_model.sv tb/tb_dmimo_loc_top.sv
./obj/Vtb_dmimo_loc_top
```

For a unit test, list `rtl/loc_pkg.sv`, the unit and its testbench. `tb_panel_unit` also needs
every unit file. Run times are:

- unit tests: seconds;
- the end-to-end test: about a second after a short build;
- the full-size test: 45 s to build and about 5 min to run, for 544,758 + 741,366 cycles.

What the tests check:

- **Units:** each unit test compares against a real-valued model of its equations, and checks
  the latency in cycles.
- **End-to-end test** (J = 4, NP = 64, 14 steps):
  - the tracking error;
  - every pass length against NP/4·(20 + 2(M−1));
  - every step latency against the formula above.

  It also counts each mechanism and fails if one never occurs:
  - time multiplexing over groups;
  - regularization passes;
  - weight renormalization;
  - LoS detection switching off (panel 2 blocked for steps 5–8) and back on;
  - resampled messages closing the ring;
  - panels with different M.
- **Full-size test:** the same checks on the default build for two steps. The second step is the
  J = 24, NP = 4096, M = 6 operating point, and it starts from the belief the last panel sent
  back. The tracking error is about 1–2 cm.

## Where this departs from the reference design

- **Likelihood.** The form above is this design's own (see "The likelihood unit"). Its timing
  follows the reference.
- **Estimate.** A 35-cycle reciprocal replaces the log2(NP)/2-cycle adder tree. The step adds
  36 cycles for the estimate, where the reference adds 6 at NP = 4096.
- **Hand-over.** Each panel starts its pass 2 cycles after the last received beat. This adds 2J
  cycles per step.
- **Resampling.** The agent resampling at the last panel takes up to 2·NP cycles and is not in
  the step latency. It overlaps with the return link before the next step.
- **Model constants.** The state-transition forms are the usual ones:
  - nearly-constant velocity for the agent;
  - survival/birth for LoS existence;
  - a random walk for the amplitude.

  All constants, the noise generator, Q16.16, the weight renormalization and the memory layout
  are this design's choices.
- **Fixed sizes.** NP, J and MAX_M are fixed at elaboration. Other panel counts or particle
  counts need a rebuild with other parameters. Fewer measurements than MAX_M are handled at
  run time.
- **Ring assumptions.** The ring needs J ≥ 2. There is no flow control, and the links are
  assumed to be lossless.
- **Outside the design.** The Ethernet links and the RF front end with its channel estimator
  are not part of this RTL. The top exposes the link streams and the measurement write port for
  them.
