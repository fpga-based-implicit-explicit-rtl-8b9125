# Half-step IMEX real-time solver for railway wireless power transfer

This is synthesizable SystemVerilog for a real-time circuit simulator. It simulates a
railway wireless power transfer (WPT) system in hardware-in-the-loop (HIL) tests.
The simulated plant has two kinds of parts:

- power-electronic converters and resonant tanks. These are piecewise-linear (PWL):
  linear between switching events.
- a set of magnetically coupled coils whose self and mutual inductances change as the
  train moves. This part is nonlinear (NL): the inductances depend on position.

A real controller drives the simulator's switch gates over an optical link. The
simulated currents and voltages go back to the controller over the same link. A
four-channel DAC also shows chosen variables on a waveform recorder. The simulator
must finish every integration step in real time, with a step of 75 ns.

The main idea is a **half-step implicit-explicit (IMEX) scheme**. The converter part is
stiff, because small resonant capacitors in it give fast modes. It needs an implicit
method to stay stable. The coil part is nonlinear, and an implicit method would mean
solving nonlinear equations every step. The coil part is therefore integrated
explicitly, and each full step is split into two stages:

| Stage | Coil fluxes (NL) | Converter states (PWL) |
|---|---|---|
| 1: t_n → t_n+½ | explicit Euler half step | implicit (backward Euler) half step |
| 2: t_n → t_n+1 | explicit midpoint step from t_n, using the stage-1 values | the same explicit midpoint step |

In stage 2 both parts use the same explicit rule on the same midpoint values. So no
part works with a one-step-old copy of the other part's outputs.

That stale copy is what makes the classic "latency-based" partitioned solvers
diverge on this circuit. In those solvers each part uses the other's interface
variables from the previous step.

## 1. The equations the hardware evaluates

**Coil part.** The state is the vector of the three coil fluxes,
x_nl = [Ψp, Ψs1, Ψs2]: one transmitter coil and two receiver coils. The coil
currents are

    y_nl = M⁻¹ · x_nl,   M = [[Lp, M1, M2], [M1, Ls1, 0], [M2, 0, Ls2]]

The time derivative of the fluxes is the coil-voltage vector y_l, which the
converter part supplies:

    stage 1:  x_nl(n+½) = x_nl(n) + h/2 · y_l(n)
    stage 2:  x_nl(n+1) = x_nl(n) + h   · y_l(n+½)

**Converter part.** The state is x_l: inductor currents and capacitor voltages.
The inputs are the independent sources u_l and the coil currents y_nl. For a fixed
switching topology k the state equation is

    dx_l/dt = A_k x_l + B_k v_in,   y_l = C_k x_l + D_k v

where v_in = [u_l; y_nl] and v = [x_l; u_l; y_nl]. One stage is a single
matrix-vector product (MVM) over v:

    stage 1:  x_l(n+½) = P1_k · v(n)
    stage 2:  x_l(n+1) = x_l(n) + P2_k · v(n+½)
    always:   y_l      = CD_k · v

The host computes the matrices offline and writes them to the chip:

    P1 = (I − h/2·A)⁻¹ · [ I | h/2·B ]    (backward Euler over h/2)
    P2 = [ h·A | h·B ]                     (explicit midpoint, added to x_l(n))
    CD = [ C | D ]

The chip never inverts a converter matrix. All of the implicit method's cost goes into
P1, and the hardware only multiplies.

The value of h appears twice:

- inside these matrices;
- in two step registers, h/2 and h, which the coil part uses.

The two must agree.

## 2. What happens in one stage

One real-time tick starts one stage. At a 200 MHz clock the default tick is 15 cycles
(75 ns). The stage flag alternates, so one full step h takes two ticks.

Counting from the tick:

| Cycle | Unit | Action |
|---|---|---|
| +1 | `switch_state_det` | Samples the switching state of every device from the gate inputs and the present variables. |
| +2 | `topo_match` | Looks the switching pattern up. |
| +2 | `nl_part` | Starts y_nl = M⁻¹ x_nl on its 3×3 MVM. |
| +3 | `coef_mem` | Copies the P1 or P2 rows and the CD rows of topology k into the MVM operand registers. |
| +5 | `nl_part` | y_nl is ready. |
| +6 | `pwl_part` | Starts the 15×16 MVM over v = [x_l; u_l; y_nl]. |
| +9 | `pwl_part` | x_l and y_l are updated. |
| +10 | `nl_part` | Takes its step with the new y_l. |
| +11 | `stage_ctrl` | Flips the stage flag, advances t_p by one half step and pulses `stage_done`. It also pulses `full_step` after stage 2. |

`full_step` moves the position when the position is predefined. It also refreshes the
DAC. A stage uses 11 of the 15 cycles.

A tick that arrives while a stage is still running is dropped, and `overrun` pulses
once. The next tick then starts a stage with the same flag, so timing stays right as
long as `overrun` never fires. An assertion in `stage_ctrl` checks that the coil
currents never arrive before the sequencer waits for them.

The order is what makes the scheme work. The converter step reads y_nl computed from
the *current* fluxes. The coil step reads y_l computed in the *same* stage. Stage 2
starts from the values saved at the start of stage 1: `base` in `pwl_part` and
`nl_part`.

## 3. Number format and units

All circuit quantities are signed fixed point, 64 bits with 24 integer bits and 40
fraction bits (Q24.40). The resolution is about 9.1e-13 and the range about ±8.4e6.
The arithmetic has two rules:

- Products are formed at 128 bits and truncated back to Q24.40, rounding towards −∞.
- Sums of products are accumulated at 128 bits and saturated once at the end.

The format is only usable if the circuit is scaled. The design assumes these units:

| Quantity | Unit |
|---|---|
| time | µs |
| inductance | µH |
| capacitance | µF |
| voltage | V |
| current | A |
| flux | µWb |

In these units h = 0.075. Element values such as 1/C = 16 (for 62 nF) or 1/L = 0.02
are of order one, and the largest currents and voltages are far below 2^23.

One place needs more precision: the inverse coupling matrix. The determinant of M is
about 1e6 µH³. A Q24.40 reciprocal of it would keep only about 19 significant bits.
`minv_unit` therefore forms 1/det with 20 extra fraction bits (Q24.60 inside its 64
bits). |det| must stay above 1/8.

## 4. Coupling inductances and M⁻¹

`inductance_lut` holds five curves sampled at 26 positions with a fixed spacing:

- the transmitter self-inductance Lp;
- the receiver self-inductances Ls1 and Ls2;
- the mutual inductances M1 and M2.

The position is in metres from the first table point. It comes from one of two
sources:

- **predefined motion:** the position starts at `POS_INIT` and grows by `VEL_STEP`
  on every full step.
- **external position:** the `pos_ext` input is taken every cycle.

`POS_MODE` selects the source and can be changed while running. The unit scales the position by `INV_DX` (1/spacing) to
s = pos·INV_DX. It then interpolates linearly between table points floor(s) and
floor(s)+1 with the fraction s − floor(s). Values beyond either end are clamped to the end point.

`minv_unit` runs on its own, continuously, from the table outputs:

1. It forms det(M) and the adjugate: 1 cycle.
2. It divides 2^100 by |det| with a restoring divider, one bit per cycle: 101 cycles.
3. It scales the adjugate by the reciprocal and publishes all nine entries at once
   with a `g_valid` pulse: 1 cycle.

A new M⁻¹ therefore appears every 103 cycles, about every 3.5 full steps. It is
always built from the position of about 100 cycles earlier. In the 75 ns step the
train moves micrometres, so this lag is far below the table resolution.

M⁻¹ changes only at publication. Within one stage the coil currents are computed with
one consistent matrix. A zero determinant keeps the previous M⁻¹.

## 5. Switching states and topologies

The converter matrices depend on which devices conduct. Each of the 28 devices has a
configuration word (`sw_cfg_t`) and a threshold. A device is on when any of these
holds:

- its gate input is high (controlled switches);
- a chosen variable, optionally negated, is above the threshold. This covers a diode
  that starts to conduct when its forward voltage appears.
- it was on at the previous stage and a chosen current, optionally negated, is still
  positive. This covers a diode that stays on until its current crosses zero.

The 28 resulting bits form the switching pattern. `topo_match` compares the pattern
with up to 16 stored patterns at once. The lowest valid match gives the topology
index k.

If nothing matches, the previous k is kept and `topo_miss` is raised for that stage.
A miss means the host's table lacks a state the circuit reached. Shoot-through is a
typical cause.

Each topology owns:

- a P1 block of 12×16 words;
- a P2 block of 12×16 words;
- a CD block of 3×16 words.

The converter matrices are all zero after reset. The step registers reset to
h/2 = 0.0375 and h = 0.075, and all matrices must be written before `run`.

## 6. Configuration map

The host writes 64-bit words with `cfg_we`, `cfg_addr` and `cfg_wdata`, one per
cycle. Bits [31:28] of the address select a region:

| Region | Use | Address fields | Data |
|---|---|---|---|
| 0 | coefficient | [27:20] topology, [19:18] set (0 = P1, 1 = P2, 2 = CD), [17:12] row, [11:6] column | Q24.40 |
| 1 | topology pattern | [27:20] topology | [63] valid, [27:0] pattern |
| 2 | inductance table | [15:8] point, [2:0] curve (Lp, Ls1, Ls2, M1, M2) | Q24.40 µH |
| 3 | register | [7:0]: see below | Q24.40 |
| 4 | device | [15:8] device, [0] 0 = `sw_cfg_t`, 1 = threshold | |
| 5 | DAC channel | [1:0] channel | [7:0] monitor index, [13:8] right shift |

Registers in region 3:

| Index | Register |
|---|---|
| 0 | h/2 |
| 1 | h |
| 2 | 1/table spacing |
| 3 | position mode (bit 0: 1 = external) |
| 4 | position step per full step |
| 5 | initial position |

`sw_cfg_t`, from the least significant bit:

| Bits | Field |
|---|---|
| 0 | current rule enable |
| 1 | voltage rule enable |
| 2 | voltage negate |
| 10:3 | voltage variable index |
| 11 | current negate |
| 19:12 | current variable index |

Variable indices point into v = [x_l; u_l; y_nl], that is 0–11, then 12, then 13–15.

The DAC monitor vector is v followed by x_nl and y_l, 22 entries in all. Each of the
four channels sends `mon[index] >>> shift` (a right shift), saturated to a signed
16-bit sample. A sample that saturates sets `dac_clip`.

## 7. Modules

| File | Role |
|---|---|
| `imex_pkg.sv` | Fixed-point type and helpers, the configuration bus struct, region and register codes. |
| `mvm_unit.sv` | M×N matrix times vector: all products in parallel (1 cycle), then saturated row sums (1 cycle). |
| `switch_state_det.sv` | Per-device on/off rule from gates, thresholds and the zero-crossing rule. |
| `topo_match.sv` | Parallel pattern match. It gives topology k and the miss flag. |
| `coef_mem.sv` | Per-topology P1, P2 and CD matrices. It loads the operands of the stage. |
| `pwl_part.sv` | Converter integration, eq. for x_l and y_l, with one 15×16 MVM. |
| `nl_part.sv` | y_nl = M⁻¹ x_nl with a 3×3 MVM, and the flux update. |
| `inductance_lut.sv` | Position source and the interpolated inductance tables. |
| `minv_unit.sv` | Continuous 3×3 inverse of the coupling matrix. |
| `stage_ctrl.sv` | Tick counter, stage sequence, stage flag, time counter, overrun. |
| `dac_out.sv` | Four-channel selection, scaling and saturation for the DAC. |
| `imex_top.sv` | Wires everything together. It also holds the h/2 and h registers. |

The top's ports are plain signals:

- configuration write;
- `run`;
- the 28 gate inputs from the controller link;
- the source vector `u_in`;
- `pos_ext`;
- the four DAC samples and the clip flags;
- stage status;
- the state vectors, brought out for observation.

The optical link to the controller and the DAC chip are outside this RTL. Only their
data sides are ports.

## 8. Where this design departs from the source method, and its limits

- **Timing interpretation.** The method describes a 75 ns step in which each
  computational step computes one stage, with the stages alternating. The RTL follows
  that literally: one stage per 75 ns tick, so a full step h spans two ticks.
  The value of h lives only in the coefficients and step registers, so a user can
  treat one tick as h/2 instead.
- **Topology storage.** Explicit storage for 16 topologies is this design's choice.
  The original converter solver follows a published method (TAMP) that is not
  specified here. The full 350 kW circuit has 28 devices: a three-level transmitter,
  two rectifiers and four bucks. It reaches far more than 16 switching
  combinations: several thousand by a rough count. Explicit storage at that size
  does not fit on one FPGA. As built, the design holds circuits with up to 16
  reachable topologies, such as one receiver branch or the simplified single-topology
  circuit used for stability studies. `N_TOPO`, `N_XL` and `N_SW` are parameters.
- **Sizes that are this design's own.**
  - 12 converter states and 1 independent source: 12 is a count of the storage
    elements of the reference circuit.
  - 200 MHz clock.
  - 16 topologies.
  - 20 guard bits for 1/det.
  - 103-cycle M⁻¹ refresh.
  - The 28 devices, 26 table points, 64-bit Q24.40 format, three coils and four DAC
    channels follow the source.
- **Implicit half step.** The source method writes the stage-1 step with the
  independent sources taken at the midpoint t_n+½, and with no h/2 factor on the
  input matrix. In real time the midpoint input is not yet known. The hardware
  therefore uses `u_in` as it stands when the stage runs. The input factor lives in
  P1, which the host computes, so either form can be loaded. The table in section 1
  uses the consistent backward Euler form.
- **Inductance model.** The inductances depend on position only. Current-dependent
  (saturation) effects are not modelled.
- **Parallel MVM.** The converter MVM is fully parallel: 240 64-bit multipliers.
  This favours latency and readability over DSP count. On a mid-size FPGA it would
  have to be narrowed or time-multiplexed.
- **Switching-state rules.** The rules are the three above. Anything more elaborate,
  such as device currents that are not state variables, must be expressed as a
  threshold on an available variable.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each testbench compares the
module with a model written independently in the testbench, including cycle counts
where the schedule fixes them. Each prints `TB_RESULT checks=N failures=M`.

`tb_imex_top` runs the whole solver at its default parameters on a reduced WPT
circuit:

- an H-bridge with an input diode;
- Lf–Cp feeding the transmitter coil;
- two series-compensated receiver coils with resistive loads;
- a 26-point coupling table.

It checks every stage against a real-valued model of the same two-stage algorithm,
with a relative tolerance of 1e-4. The largest error observed is about 3e-5. Over
about 7000 full steps the test goes through these conditions:

- a fixed position;
- predefined motion across table points;
- a switch to external position;
- a low-voltage phase, in which the input diode is held on by its current and turns
  off at the current zero crossing;
- a shoot-through pattern that no topology matches;
- DAC clipping.

The test counts each of these events and fails if one never occurs. It also checks
that the stage period is exactly 15 cycles.

To simulate with Verilator 5 (timing mode):

    verilator --binary --timing -Wno-fatal -y rtl --top-module tb_imex_top \
        rtl/imex_pkg.sv tb/tb_imex_top.sv
    ./obj_dir/Vtb_imex_top

`-y rtl` lets Verilator find each module in the file of the same name. The other
testbenches build the same way with their own name. `tb_imex_top` takes about 15 s to
build and run. The overrun path cannot fire at the default tick, so it is covered by
`tb_stage_ctrl` with a shorter tick. `tb_imex_top` checks that it never fires.
