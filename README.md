# A DAC made of shorted FPGA output pins

Most low-cost FPGAs have no data converter. This design builds an N-bit
voltage DAC from nothing but ordinary GPIO output buffers. 2^N−1 output pins
are tied together on the board into one node, V_DAC. Each output buffer ends
in a CMOS inverter: when its pin drives 1, its PMOS connects the node to the
I/O supply, and when it drives 0, its NMOS connects the node to ground. With
D of the pins high and the rest low, the node sits where the pull-up and
pull-down on-resistances balance. If every transistor were an equal resistor,
this would be a plain resistor divider:

    V_DAC = D / D_max · VDD,        D_max = 2^N − 1

So the digital side has one job: for each code D, drive exactly D of the
2^N−1 pins high. Everything else — output level, linearity, supply current,
speed — is set by the pads and by a few optional board resistors.

The default build is the standalone 4-bit version: 15 pins on a 3.3 V bank,
no external parts.

## What is in this repository

| File | Kind | Role |
|---|---|---|
| `rtl/dac_pkg.sv` | package | `enc_mode_e` (binary / thermometer), `code_src_e` (external / staircase), `n_gpio()` |
| `rtl/staircase_gen.sv` | RTL | periodic 0…D_max staircase test pattern with a programmable step length |
| `rtl/pad_encoder.sv` | RTL | code → pins: binary weighted (bit b_i drives 2^i pins) or thermometer (D unit pins high) |
| `rtl/fpga_dac_core.sv` | RTL | the FPGA logic: code source, mapping, pin register |
| `rtl/gpio_dac_node_model.sv` | behavioural model | the shorted pins and board resistors; returns V_DAC and supply current |
| `rtl/fpga_dac_top.sv` | simulation top | core plus pin model |
| `tb/tb_*.sv` | testbenches | one self-checking bench per module |

Only `fpga_dac_core` and the modules below it are meant for an FPGA.
`gpio_dac_node_model` uses `real` arithmetic and stands in for the analog
board in simulation. So `fpga_dac_top` simulates but does not synthesize.

## The pin network and why it is not linear

This is the part of the design that takes the most explanation. The RTL is
trivial next to it, but it decides what the RTL's output voltage actually is.

The pins are transistors, not resistors. Take both kinds to have the same
threshold V_th and the same gain, with the pre-drivers swinging the full rail
so that |V_gs| = VDD. Then:

* **Low codes.** Most pins pull down, so V_DAC is low. The NMOS devices have a
  small V_ds and sit in triode. The few PMOS devices see a large V_sd and sit
  in saturation, where their current barely depends on V_DAC. Each step
  raises the output by less than one ideal LSB.
* **Mid-scale.** Both kinds are in triode and behave like matched resistors.
  This is the near-linear stretch, about VDD − 2·V_th wide.
* **High codes.** This is the mirror image of the low codes.

In divider form the error is a mismatch of conductances. With ε = 1 − g_on/g_op:

    V_DAC = V_ideal · [1 + (D/D_max)·ε / (1 − (D/D_max)·ε)]

A second cost is **static current**. Pull-up and pull-down pins are on at the
same time, so current flows from supply to ground through the pins. It is zero
at the two end codes, peaks at mid-scale, and doubles with every added bit.
This limits the standalone DAC to a few bits. The measured 4-bit board drew
about 300 mA at mid-scale, about 40 mA per pin. The rated DC limit of one pin
on that FPGA is 24 mA.

### Correction with 2–4 resistors

The model accepts four optional board resistors:

```
VDD ── r_sp ── V_d ──┬── PMOS of the D high pins ──┬── V_DAC
                     └────────── r_pp ─────────────┘     │
V_DAC ──┬── NMOS of the D_max−D low pins ──┬── V_s ── r_sn ── GND
        └────────── r_pn ──────────────────┘
```

* **Parallel only** (r_pp = r_pn, r_s = 0). Each resistor carries the current
  that the pin group on its side cannot. The branch currents stay roughly
  constant and both pin groups stay in triode across the whole code range. If
  α = r_o / r_p, then V_DAC ≈ (D + α)/(D_max + 2α)·VDD. To stretch the linear
  region from V_th to VDD − V_th, choose
  α ≈ D_max·V_th / (VDD − 2·V_th). This improves linearity, but the output
  span shrinks and the current roughly triples.
* **Series and parallel.** r_sp and r_sn lower the pins' |V_gs| = V_d − V_s.
  Both pin groups can then be in saturation at once, where they behave alike
  (channel-length modulation neglected). The series resistors also cap the
  current. The design equations are
  (VDD − 2V_th)/(r_sp + r_sn) ≤ I_T ≤ (VDD − V_th)/(r_sp + r_sn), and
  r_p = V_th / I_T.

The measured board could not take a ground-side resistor, so r_sn = 0. It used
r_sp = 10 Ω and r_p = 5 Ω at 4 bits, and r_sp = 9 Ω and r_p = 5 Ω at 5 bits.

## The pin model (`gpio_dac_node_model`)

The model counts the enabled pins that drive 1 (n_hi) and the enabled pins
that drive 0 (n_lo). A disabled pin is open. It then solves the network above
for the settled node.

* `MODEL = 0`: every on transistor is a resistor `R_ON_OHM`. This reproduces
  the ideal divider formulas exactly, which is useful as a reference.
* `MODEL = 1` (default): square-law MOSFETs with threshold `VTH_V`, no
  channel-length modulation. The gain factor β is set so that one pin carries
  (VDD/2)/R_ON at V_ds = VDD/2, which matches how the on-resistance was
  measured (current through one pin at mid-scale):
  β = (VMID/R_ON) / ((VDD−V_th)·VMID − VMID²/2), with VMID = VDD/2.

The solver uses two nested bisections. The outer one is on the supply current
I_T, which fixes V_d = VDD − I_T·r_sp and V_s = I_T·r_sn. The inner one is on
V_DAC, for current balance at the node. Both functions are monotonic, so
60 halvings each always converge. Results come out as integers:
`vdac_uv` (µV) and `itotal_ua` (µA). The model also reports `ipin_max_ua`, the
largest current through any single on pin. It raises `pin_overload` when that
current exceeds `I_PIN_MAX_A` (24 mA, the DC rating of one pin on the
measured FPGA). A standalone DAC exceeds this at every code except the two
ends: at low codes a few pull-up pins carry the whole current, and near
mid-scale each pin carries ~40 mA. They update with zero delay whenever a pin
or enable changes.

What the defaults (VDD 3.3 V, R_ON 40 Ω, V_th 1.15 V) give for 4 bits, next to
the board measurements:

| Set-up | Model, mid-scale current | Measured | Model, largest DNL |
|---|---|---|---|
| standalone | 302 mA | ~300 mA | 1.6 LSB (measured ≤ 1.5 LSB) |
| r_pp = r_pn = 2.35 Ω | 1.01 A | ~1.0 A | 0.12 LSB (measured ≤ 0.5 LSB) |
| r_sp = 10 Ω, r_p = 5 Ω | 172 mA | about 5× below parallel-only | ≈ 0 (measured ≤ 0.25 LSB) |

Treat the model as a first-order guide, not a prediction of a given board:

* The end steps are compressed more than measured: 78 mV for the first step,
  against 220 mV ideal.
* In the series-parallel set-up both pin groups stay fully saturated. Without
  channel-length modulation the output is then almost perfectly linear, much
  better than the real pins give.
* Transition times are not modelled. On the board these were ~30 ns with a
  heavily loaded scope probe. So neither the settling of a step nor the
  glitches of the binary mapping (next section) appear in simulation.

## The measured configurations in simulation

`tb_workloads` runs the complete DAC through the staircase (thermometer
mapping, 20 MS/s) in each board configuration that was built and measured. It
reports the following (DNL and INL use an end-point fit):

| Configuration | Range | Peak current | DNL | INL | Measured on the board |
|---|---|---|---|---|---|
| 4 bit, standalone | 3.30 V | 302 mA | 1.60 LSB | 2.14 LSB | 0–3.3 V, ~300 mA, DNL ≤ 1.5, INL ≤ 2 |
| 4 bit, r_p = 2.35 Ω | 1.15 V | 1011 mA | 0.12 | 0.22 | ~1.0 A, DNL ≤ 0.5, INL ≤ 0.5 |
| 4 bit, r_sp = 10 Ω, r_p = 5 Ω | 0.13 V | 172 mA | ≈0 | ≈0 | ~600 mV range, DNL ≤ 0.25, INL ≤ 0.5 |
| 4 bit, r_sp = 10 Ω, r_p = 7.5 Ω | 0.45 V | 150 mA | ≈0 | ≈0 | wider range, lower current, worse linearity |
| 4 bit, r_sp = 10 Ω, r_p = 10 Ω | 0.80 V | 138 mA | 0.15 | 0.30 | (same trend) |
| 5 bit, r_sp = 9 Ω, r_p = 5 Ω | 0.29 V | 189 mA | ≈0 | ≈0 | ~222 mA |

The standalone and parallel-resistor cases land close to the measurements.
With series resistors the model gets the direction of every trend right.
Raising r_p widens the range, lowers the current and finally costs linearity.
It also gets the current roughly right. But its output range is several times
narrower than on the board, and its linearity is better than the board's.
Both follow from the ideal square law: in strict saturation without
channel-length modulation, the pins barely move the node. Use the model for
the supply-current budget and the standalone or parallel-resistor transfer
curve, not for sizing the series-parallel network.

## Code-to-pin mappings

Both mappings live in `pad_encoder`, selected by `enc_sel`.

**Binary-weighted** (`ENC_BINARY`). Code bit b_i drives a group
of 2^i pins. For 4 bits the groups are 1 + 2 + 4 + 8 pins. The vector order is
this design's choice:

    gpio[0] = b0   gpio[2:1] = b1   gpio[6:3] = b2   gpio[14:7] = b3

The settled level is right for every code. On a major carry, such as
0111 → 1000, 7 pins turn off while 8 turn on. The pins do not switch at
exactly the same time, so at 20 MS/s the output shows a visible dip at those
steps, and the DAC is not monotonic.

**Thermometer** (`ENC_THERMOMETER`). Pin k is high when D > k, so
D → D+1 turns on one more pin and turns none off. The output is monotonic by
construction. It needs the same 2^N−1 pins as the binary mapping, because the
binary mapping already uses unit pins.

For the same code, both mappings turn on the same number of pins. In the
static model they therefore give identical voltages, and the top-level test
checks this.

## The FPGA core (`fpga_dac_core`)

```
code_in ───────────┐
staircase_gen ──┬──┴─ src_sel ─── pad_encoder (enc_sel) ─► [reg] ─► gpio_out[2^N−2:0]
 (sample_div)   │                            out_enable ─► [reg] ─► gpio_oe[2^N−2:0]
                └─ sample_tick
```

* **Pin register.** All pin drive bits and enables come from flip-flops, so
  every pin of the DAC switches on the same clock edge. On an FPGA these can
  be placed in the I/O cells. Latency is one clock: a code present at the
  selected source before edge k reaches the pins at edge k. `code_q` is the
  code currently on the pins.
* **Assertion.** A concurrent assertion checks on every clock that the
  number of high pins equals `code_q`. Both mappings must keep this
  invariant, because the node voltage depends only on that count.
* **Reset** (`rst_n`, active low, asynchronous). All pins go low with their
  buffers disabled, so the node floats and draws no current until
  `out_enable` is raised.
* **Staircase source.** When `src_sel = SRC_STAIRCASE`, the code counts
  0 … D_max and wraps, advancing once every `sample_div` clocks (0 counts as
  1). At a 100 MHz clock, `sample_div = 50000` gives 500 µs steps.
  `sample_div = 5` gives 20 MS/s. The counter is frozen while the external
  source is selected, and restarts from 0 after reset.
* **Pin settings outside the RTL.** The pins must be constrained in the FPGA
  tool as plain push-pull outputs with pull-ups, pull-downs and input buffers
  off. Drive strength is a pin setting too. Higher strength means lower R_ON
  and more current.

Both selects are run-time inputs here, so one bitstream can show both
mappings. The measurements were taken with separate builds.

## Where this departs from the published design

What is taken from the published DAC:

* the principle of 2^N−1 shorted output pins
* the binary 1/2/4/8 weighting
* the thermometer alternative
* the staircase stimulus and its rates
* the resistor correction networks
* the measured constants: 3.3 V, 40 Ω, 1.15 V, and the resistor values

The following are this design's own:

* the pin order in the vector
* the pin register and its one-cycle latency
* the reset state
* the run-time selects and the 16-bit step divider
* the assumption of a 100 MHz clock, the board's maximum
* the square-law form of the pin model and its calibration

The original transistor model was described but not given.

Not modelled, and therefore not exercised by the testbenches:

* **Pin dynamics.** The model has no pin transition time (~30 ns measured)
  and no load capacitance. The short dips of the binary mapping at
  major-carry steps therefore do not appear in simulation; only the settled
  levels do.
* **Drive strength.** The drive-strength setting of the output buffers is a
  pin constraint, not logic. Model it by changing `R_ON_OHM`.
* **Bank supplies.** All pins share one I/O supply, as on the measured
  board. Separate per-bank supplies are not modelled.
* **Device details.** Channel-length modulation and weak-inversion operation
  are not modelled.
* **Digital correction.** The transfer curve could be corrected digitally
  (a code-to-code lookup ahead of the mapping). That is mentioned as an
  option for the design, but it is not part of it and is not built here.

## Simulating

All commands are run from the repository root. The default build is 4 bits;
set `N_BITS` for other resolutions. The number of pins follows as 2^N−1.

```sh
# lint a module
verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/dac_pkg.sv rtl/fpga_dac_core.sv

# run a testbench (any of tb/tb_*.sv)
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
    rtl/dac_pkg.sv tb/tb_fpga_dac_top.sv --top-module tb_fpga_dac_top
./obj_dir/Vtb_fpga_dac_top
```

Each bench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Bench | What it checks |
|---|---|
| `tb_staircase_gen` | step length for several dividers (0, 1, 3, 5, 17), +1 steps, wrap, freeze |
| `tb_pad_encoder` | every code at 4 and 5 bits, both mappings: each binary pin against its owning bit, high-pin count = code, thermometer pattern, no pin turning off on an up-step |
| `tb_fpga_dac_core` | reset state, one-clock latency, both mappings, enables, staircase timing |
| `tb_gpio_dac_node_model` | resistive set-ups against closed-form divider formulas; square-law set-ups against the measured trends (rail-to-rail, symmetry, compressed ends, ~300 mA peak, flat current and better DNL with parallel resistors, ≥3× less current with series resistors); disabled pins |
| `tb_workloads` | six board configurations end to end (table above), checked against the measured trends |
| `tb_fpga_dac_top` | default parameters, end to end: both sources and mappings, a mapping switch mid-run, 20 MS/s and 500 µs staircases (the latter one full period, 8 ms simulated), wrap to 0 V, output disable, pin-overload flag |

`tb_gpio_dac_node_model` prints the transfer curve and current of all six
set-ups. To try another board, override the model's parameters on
`fpga_dac_top`, for example `R_SP(9.0), R_PP(5.0), R_PN(5.0), N_BITS(5)` for
the 5-bit configuration.
