# Real-time LQG control and hardware-in-the-loop plant simulation for nanomechanical oscillators

Levitated particles and other nanomechanical resonators are usually stabilised or cooled by
feedback. The feedback has to estimate the full oscillator state from noisy position readings.
It also has to act within a fraction of an oscillation period, at hundreds of kHz.
This RTL holds two FPGA cores for that job:

* **LQG controller.** A Kalman estimator runs together with an LQR state feedback. The
  design handles seven states: three oscillator axes with position and velocity each, plus a
  drift state. It takes two detector inputs and drives two actuator outputs, and it computes
  one complete update every 64 ns.
* **Hardware-in-the-loop (HIL) simulator.** It replaces the physical experiment with a
  stochastic, possibly nonlinear model. The model has three degrees of freedom and uses the
  same converters. It updates 6.944 million times a second, so a controller can be developed
  and tested against a plant whose behaviour is known exactly.

On hardware each core sits on its own board, and the two are joined only through analog
converters. The top level `lqg_hil_top` places both cores side by side and brings out their
converter sample ports. The end-to-end test bench closes the loop on these ports and shows that
the controller really damps the simulated resonator.

The architecture, number formats, latencies and register-level mechanisms follow a published
FPGA implementation of such a controller and simulator, "FPGA-based LQG controller and
hardware-in-the-loop simulator implementation for nanomechanical systems". Everything that
publication leaves open was chosen here, and section 5 lists those choices.

## 1. Number formats

Both cores use fixed-point arithmetic sized for the 25 x 18-bit multipliers of the FPGA.

| Signal | Width / fraction bits | Where |
|---|---|---|
| Estimated states ξ̂ | 25 / 22 | controller |
| Feedback u, detection χ | 14 / 13 | controller |
| Matrix residues (A_d−L_dC, B_d, L_d, K_d) | 18 / 14, with a 5-bit shift (6 bits for K_d) | controller |
| Converter samples | 14 / 12 | simulator |
| Internal signals (z, q, q̇, NLF input/output) | 25 / 17 | simulator |
| Constants (weights, factors, κ, NLF scales) | 18 / 10 | simulator |
| Integration accumulators | 47 / 39 | simulator |
| Nonlinear-function table entries | 16 / 14 | simulator |

The controller's coefficients are **shift-float** numbers. Each matrix element is stored as
a residue `a` and a non-negative exponent `s`, and its value is `a · 2^-s`. A product
`a·x` is formed at full width and then shifted right by `s`. Every coefficient therefore keeps
its 18 significant bits, even when the magnitudes in one matrix span many decades, as they do
after discretisation at 64 ns. The exponents cost one barrel shifter per multiplier.
`lqg_sf_row` is one row of such a matrix-vector product. The products are summed in 48 bits
(36 fraction bits) before they are truncated and saturated.

## 2. The LQG controller (`lqg_controller`, 125 MHz)

One controller sample computes

    u[n]     = −K_d ξ̂[n]
    ξ̂[n+1]   = (A_d − L_d C) ξ̂[n] + B_d u[n] + L_d χ[n]

**Sample schedule (`lqg_engine`).** A free-running 3-bit phase counter divides the 125 MHz
clock into 8-clock samples, giving T_s = 64 ns. The phases are used as follows:

* **Phase 0.** The engine captures the calibrated inputs χ and evaluates both rows of K_d as
  two 7-term rows. It then registers u, or zero when feedback is disabled.
* **Phases 1 to 7.** One 11-term row unit computes one row of the state update per clock.
  Its operands are the seven old states, the new u and the captured χ. u and χ are shifted
  left by 9 bits, which brings them to the state format.
* **End of phase 7.** All seven new states replace the old ones together, so a row never
  sees a mix of old and new states.

The states are visible one clock after phase 7. u[n] is visible one clock after phase 0.
A detection sample captured in phase 0 therefore reaches u one sample, or 8 clocks, later.

**Parameter sets (`lqg_param_bank`).** The controller holds two complete parameter sets.
Each set has a staging copy and an active copy:

* Software writes 24-bit words into a staging copy. A word holds the shift in bits 23:18 and
  the residue in bits 17:0.
* The addresses are: A_d−L_dC at `7r+c`, B_d at `49+2r+i`, L_d at `63+2r+i` and K_d at
  `77+7i+c`.
* A commit pulse moves the whole staging copy into the active copy in one clock, at the next
  sample boundary.
* A set-select change also takes effect only at a sample boundary.

The controller never stops, and no sample is computed with a mixture of coefficients.
`state_clear` zeroes the estimate and u.

**Calibration (`io_calib`).** The ADC path computes `χ = (raw + o_in)·g_in` and the DAC path
computes `u_out = u·g_out + o_out`. Both take 4 clocks, and the gains have 14 fraction bits.

**Recorder (`lqg_recorder`).** After `arm`, a frame is taken every `decim`-th sample. A frame
latches all 11 channels at once: χ₁, χ₂, u₁, u₂ and ξ̂₁…ξ̂₇, each sign-extended to 32 bits.
The channels selected by `mask` then leave in ascending order on a valid/ready word stream,
with `last` on the final word of a frame. Recording stops after `n_frames` frames. If a frame
falls due while the previous one is still being sent, that frame is dropped and counted in
`overruns`. The stream carries at most one word per clock, which is 8 words per sample. So
all 11 channels at `decim = 1` always overrun, and `decim ≥ 2` is the practical minimum for a
full frame. Writing the stream into DDR memory is the job of a memory writer outside this
RTL.

## 3. The HIL simulator (`hil_simulator`, 250 MHz)

The simulator solves, for j = 1..3, k = 1..2 and i = 1..2:

    z_j   = b_j ξ_j + Σ_i a_{j,i} α_i(u_i)                       (input mapping)
    q̈_j   = xdot_factor_j f_j(q̇_j) + x_factor_j g_j(q_j) + u_factor_j h_j(z_j)   (slice j)
    y_k   = Σ_j d_{k,j} β_{j,k}(q_j or q̇_j)                      (output mapping)

Here ξ_j is unit-power Gaussian noise, and α, β, f, g and h are table-driven nonlinear
functions. The signal path and its latency in 4 ns clocks are:

| Stage | Clocks | Module |
|---|---|---|
| ADC calibration | 4 | `io_calib` |
| input mapping, NLF | 12 | `hil_nlf` in `hil_input_mapping` |
| input mapping, linear | 6 | `hil_input_mapping` |
| state slices | 36 | `hil_state_slice` |
| output mapping, NLF | 12 | `hil_nlf` in `hil_output_mapping` |
| output mapping, linear | 7 | `hil_output_mapping` |
| DAC calibration | 4 | `io_calib` |
| total | 81 (324 ns) | |

The two mappings run on every clock. Only the slices run at the sample rate: a sequencer
starts all three slices together every 36 clocks (6.944 MS/s) and steps the three noise
generators at the same time. The 81-clock total is reached when a slice sample starts just
as a new z arrives. Otherwise up to one slice period is added.

### 3.1 State slice and integrator

This is the part that needs the most care. `hil_state_slice` proceeds as follows:

1. At `start` it latches z and its own q and q̇.
2. It passes them through its three NLFs, which take 12 clocks.
3. It multiplies the results by the three factors and adds them. The sum is the acceleration
   q̈, ready 14 clocks after start.
4. It hands q̈ to `hil_integrator`.
5. The new q and q̇ are back 9 clocks later and appear on the outputs at clock 35.

The next sample therefore starts with the new state, and the loop q → g(q) → q̈ → q closes
inside one period.

`hil_integrator` is a semi-implicit two-step scheme:

    q̇[n+1] = q̇[n] + t_s (3/2 q̈[n] − 1/2 q̈[n−1])      Adams–Bashforth
    q[n+1]  = q[n]  + t_s/2 (q̇[n+1] + q̇[n])            Adams–Moulton (trapezoid)

The time step is of the order of 10⁻⁷ in physical units. It is written as `t_s = κ·2^λ`, where
κ is an 18-bit constant and λ a signed shift. Each path works in three steps:

1. It forms its weighted increment: `q̈ + (q̈ − q̈_prev)/2` for the velocity, `(q̇_new + q̇_old)/2`
   for the position.
2. It multiplies by κ, shifts by λ and adds the result into a 47-bit accumulator with
   39 fraction bits.
3. A rescaling stage shifts the accumulator by `λ_q̇` (or `λ_q`), cuts a 25-bit word out of
   it and multiplies by `κ_q̇` (or `κ_q`).

The accumulator can therefore keep a state in a scaled unit with many guard bits, while the
rest of the slice sees it in the 25/17 format. With `κ_q̇ = κ_q = 1` and `λ_q̇ = λ_q = 0` the
accumulators hold q̇ and q directly.

The integrator's operations are spread over 9 clocks by a one-hot phase register, so each
clock holds one multiplication or one accumulation. `clear` zeroes the accumulators and the
histories. It is the "reset simulation" command (bit 1 of the control register).

### 3.2 Nonlinear function units

`hil_nlf` evaluates y = s_out · F(s_in · x). The steps are:

1. The input is scaled by `s_in`, saturated to [−1, 1) and re-centred by inverting its sign
   bit.
2. The top 10 bits select a table entry, and the remaining 15 bits are the interpolation
   fraction.
3. The table has 2¹⁰ entries of 16 bits (14 fraction bits). It is stored as two banks, even
   and odd entries, so the two neighbouring entries are read in the same clock.
4. The result is `F_k + (F_{k+1} − F_k)·frac`, multiplied by `s_out`.

Above the last entry the last value is held. Entry k holds F(−1 + k/512). The latency is
12 clocks in every mode, including bypass, where the input is just delayed. NLF units that
have an **alternate table** (the nine slice NLFs) store both tables and choose one per sample
with `alt_sel`. This allows, for example, a potential to be switched between a confining and
a saddle shape while the simulation runs.

Software writes table entries through the configuration bus. For each slice NLF, the
alternate table is chosen either by a register bit or by an external pin, as set by a
per-bit mask. The pins pass a two-flop synchroniser.

### 3.3 Noise

`hil_noise_gen` builds Gaussian noise in three steps:

1. A 24-bit Galois LFSR with the polynomial x²⁴+x²³+x²²+x¹⁷+1 (mask `0xE10000`, shifting
   right) advances 24 steps per sample.
2. Its top and bottom 10 bits become u₁ and u₂ in (0, 1).
3. The Box–Muller pair `r = √(−2 ln u₁)`, `x₁ = r cos 2πu₂` and `x₂ = r sin 2πu₂` comes from
   two 1024-entry ROMs. The ROMs are computed during elaboration; the sine reuses the cosine
   ROM a quarter turn earlier. The output is `ξ = (x₁ + x₂)/√2`, which has unit power.

The three generators differ only in their seeds. The test bench checks the LFSR bit for bit,
checks each ξ against a real-valued Box–Muller of the same bits, and checks the mean and
variance over 20 000 samples.

### 3.4 Configuration map (`hil_cfg_regs`)

The configuration bus takes one 32-bit word per clock with a 20-bit word address. Constants
take bits 17:0 of the data word, and shifts take bits 5:0, signed. The registers are:

| Address | Contents |
|---|---|
| 0 | bit 0 run, bit 1 reset integrators (one-clock pulse) |
| 1 / 2 | alternate-table source mask (1 = pin) / software select, bit 3j+{0 h, 1 g, 2 f} |
| 3 | NLF bypass, one bit per NLF |
| 4+i / 6+i | ADC offset / gain (gain 10 fraction bits) |
| 8+k / 10+k | DAC offset / gain |
| 16+2j+i | a_{j,i} |
| 24+j | b_j |
| 32+3k+j | d_{k,j} |
| 40 | output select, bit 3k+j: 1 = use q̇_j |
| 64+16j+f | slice j: f = 0 u_factor, 1 x_factor, 2 xdot_factor, 3 κ, 4 λ, 5 κ_q̇, 6 λ_q̇, 7 κ_q, 8 λ_q |
| 128+n / 160+n | input / output scale of NLF n |
| bit 19 set | table write: bits 15:11 NLF number, bit 10 alternate table, bits 9:0 entry, data bits 15:0 |

The 17 NLFs are numbered as follows: α₁ and α₂ are 0 and 1; slice j has h, g, f at
2+3j, 3+3j and 4+3j; β for output k and slice j is 11+3k+j.

After reset, every NLF is bypassed with unit scales, the gains are 1.0, every other constant
is zero, and the simulator is stopped.

## 4. What is outside the RTL

The following parts connect to the cores at plain ports:

* The converters: 14-bit sample ports.
* The processor that runs the configuration software: the controller's parameter, calibration
  and recorder ports, and the simulator's write bus.
* The DDR memory that receives recordings: the recorder's word stream.

The host-side work is not hardware and arrives only as register values: discretisation,
Riccati solutions, state scaling, conversion of every coefficient into residue and shift, and
generation of the function tables.

## 5. Choices made here, and departures from the published design

These points are not fixed by the algorithm; each is documented in the opening comment of its
module:

* **Slice equation.** The plain model reads q̈ = f(q̇) + g(q) + c·z. The slice here has a
  constant factor on each of the three terms, and it passes z through a third function h.
  This matches a configuration interface with a `u` function and factor, an `x` function and
  factor, and an `xdot` function and factor per slice. Setting h to bypass and the x and
  xdot factors to 1 gives the plain model back.

* **Controller schedule.** A 125 MHz clock with 8 clocks per sample, u computed first and
  the states computed one row per clock.
* **Truncation and saturation.** The rule at every narrowing step.
* **Interfaces.** The parameter word layout and address map, the recorder's stream interface
  and its overrun policy.
* **Pipeline cuts.** Where the pipelines are cut inside the mapping and calibration latencies.
* **Slice internals.** The slice's internal schedule and the integrator's operation order.
* **NLF details.** The NLF bank split, behaviour at the table edge, and which NLFs have
  alternate tables (all slice NLFs).
* **Noise details.** The noise bit split, ROM sizes and seeds.
* **Simulator control.** The simulator register map, its reset values, and the pin
  synchroniser.
* **Top level.** The two cores side by side, with the loop closed in the test bench. On
  hardware they are two boards joined through converters.
* **Calibration gains.** 14 fraction bits in the controller and 10 in the simulator.

## 6. Simulating

Every module has a self-checking test bench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`. Most of them compare against bit-exact integer models
written independently of the RTL; `tb/lqg_model.svh` is the controller model shared by three
of them. To build and run one with Verilator 5:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/hil_pkg.sv rtl/lqg_pkg.sv tb/tb_lqg_hil_top.sv --top-module tb_lqg_hil_top
    ./obj_dir/Vtb_lqg_hil_top

The test benches are:

* `tb_hil_nlf`: tables, interpolation, scales, bypass, and per-clock table switching.
* `tb_hil_noise_gen`: LFSR sequence, Box–Muller values and statistics.
* `tb_hil_integrator` and `tb_hil_state_slice`: bit-exact against the model; latency 9 for the integrator, outputs
  35 clocks after start and a 36-clock period for the slice; an open-loop parabola; a damped step response; alternate-table switching.
* `tb_hil_input_mapping` and `tb_hil_output_mapping`: bit-exact with latencies 18 and 19,
  including saturation.
* `tb_hil_cfg_regs`: every register against an independent decoder.
* `tb_hil_simulator`: configured only through its bus. It checks an oscillator bit-exact at
  the DAC, the 36-clock sample period, noise, alternate tables by register and by pin,
  calibration and clear.
* `tb_lqg_sf_row`, `tb_lqg_engine`, `tb_lqg_param_bank`, `tb_lqg_recorder` and
  `tb_lqg_controller`: bit-exact estimator and regulator, staged commits, set switching at
  sample boundaries, feedback enable, state clear, and recorder frames including overruns.
* `tb_lqg_hil_top`: both cores at their default sizes in a closed loop, described below.
* `tb_lqg_hil_saddle`: the potential-switching protocol on one axis, described below.

**The closed-loop run.** The simulator models a noise-driven resonator with ω = 1, damping 0.1
and t_s = 2⁻⁶, read out by its velocity. The controller's set 0 turns that velocity into a
force −0.5·q̇ (cold damping), and set 1 has no gain. In a typical run the displacement variance
drops from about 0.13 with feedback off to about 0.013 with feedback on, and returns to about
0.10 when set 1 is selected while running. The test also exercises controller state clear,
recorder overruns, alternate tables by software and by pin, NLF table loading and bypass, and
simulator reset. It counts each of these mechanisms and fails if one never happened. The run
takes a few seconds of simulation time.

**The potential-switching run.** This run uses one axis of a levitated particle. Its
potential force sits in the x function of slice 0. The primary table holds a confining force
−q and the alternate table a saddle force +q. The controller reads position and velocity and
has two parameter sets. Set 0 only damps. Set 1 also stiffens the trap with a position gain
of 2. The run goes through the classic switching sequence:

1. Feedback is switched on with set 0. The position variance falls from about 0.011 to
   about 0.0006.
2. The controller is switched to set 1, and then the potential to the saddle. The particle
   stays confined, with a variance of about 0.0005.
3. Feedback is switched off. The particle runs away.
4. The particle is restarted on the saddle with set 0. It is lost as well, because set 0 has
   no position gain.

The published example has two coupled axes and cross-talk in the detection. Its
controller is a full Kalman design made off-line and is not reproduced here.

## 7. Limits and trust

All arithmetic is checked bit for bit against models in the test benches. The test benches
check behaviour, not the numerical quality of a particular physical model. The quality of a
real configuration depends on the host-side scaling, which this RTL does not contain.

The simulator's NLF multiplications and the controller's shift-float rows are written as
plain `*` and `>>>`. Their pipelining is left to synthesis retiming within the stated
latencies.

The 125 MHz and 250 MHz clocks are independent, and each core is a single clock domain. The
only asynchronous inputs are the simulator's NLF-switch pins, which are synchronised. When
both cores are placed in one device, the converter ports that close the loop need a
clock-domain crossing that is not part of this RTL.
