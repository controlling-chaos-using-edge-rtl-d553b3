# NG-RC chaos controller: RTL

This is synthesizable SystemVerilog for a small FPGA controller. It holds a
chaotic electronic circuit (a double-scroll oscillator) on an arbitrary
time-dependent trajectory. The controller measures the two capacitor
voltages V1 and V2 once every 5 µs (200 kHz). From them it computes one
control current u1, which is injected at the V1 node.

The controller is nonlinear. It does not use a physics model of the
circuit. Instead it uses a *next-generation reservoir computer* (NG-RC): a
linear combination of a few hand-picked polynomial features of the present
and previous measurements. The model is fitted offline by ridge regression
on data recorded by the same hardware. The model predicts V1 one step (or
two steps) ahead. The controller then chooses u1 so that the prediction
lands on the desired value, minus a fraction of the present error. This is
feedback linearisation. The whole evaluation is a few dozen multiply-adds in
18-bit fixed point, and it finishes in 50 ns.

The design follows a published experiment built on an Intel MAX 10 FPGA
board. That work gives the algorithm, the feature set, the number formats,
the rates and the table sizes. It does not give the RTL. The clock
frequency, the cycle schedule, the handshakes and the serial DAC frame are
this design's own choices; they are listed under
[Departures and assumptions](#departures-and-assumptions).

## 1. The control law

Write X_i = (V1_i, V2_i) for the measurements at update i, Y_i = V1_i for
the controlled variable, and u_i for the perturbation applied at update i.
The plant is assumed to respond linearly to the present perturbation:

    Y_{i+m} = F(X_i, X_{i-1}, u_{i-1}) + Wu * u_i

Here m is the prediction horizon: 1 for the one-step-ahead controller (the
default), 2 for the two-step-ahead one. The NG-RC learns F as W_F · O_F. It
also learns Wu, the weight of u_i in the same regression. Solving for the
u_i that makes Y_{i+m} equal the desired value gives the control law:

    u_i = Wu^-1 * [ Y_des,i+m  -  W_F · O_F,i  +  K * e_i ],    e_i = Y_i - Y_des,i

If the model is exact, the tracking error obeys e_{i+m} = K e_i. It
therefore decays whenever |K| < 1. K is a single scalar gain; the
published runs used K around 0.7.

### The feature vector

O_F has nine entries. Write d = V1 - V2 (the voltage across the nonlinear
coupling element). The entries are:

| index (`feat_idx_e`) | feature |
|---|---|
| 0 `F_U_PREV`   | u_{i-1} |
| 1 `F_V1`       | V1_i |
| 2 `F_V1_PREV`  | V1_{i-1} |
| 3 `F_MIX_A`    | d_i · V1_{i-1}² |
| 4 `F_MIX_B`    | d_{i-1} · V1_i² |
| 5 `F_CUBE`     | d_i³ |
| 6 `F_CUBE_PRV` | d_{i-1}³ |
| 7 `F_V2`       | V2_i |
| 8 `F_V2_PREV`  | V2_{i-1} |

There is no constant term, because the circuit's equations have none. The
terms were chosen by system identification: from all polynomials up to
cubic order in two time steps, the ones that best predict V1 were kept.

### Reusing last step's products

Three of the nonlinear terms at step i are delayed copies of terms already
computed at step i-1: d_{i-1}³, V1_{i-1}², and d_{i-1} itself.
`ngrc_features` keeps them in registers instead of recomputing them. Each
update then needs only five 18×18 products for the features:

- stage 1: V1_i² and d_i²
- stage 2: d_i³ = d_i² · d_i, d_i · V1_{i-1}², and d_{i-1} · V1_i²

The delay registers advance once per evaluation. The block therefore must
be started exactly once per update. After reset all delayed terms are zero.

`control_law` adds eleven more products: nine for W_F · O_F, one for K e,
and one for Wu^-1. The total is 16 hardware multipliers. The published
implementation reports 18. Its own count assumes three multiplications per
cubic term, and that cannot be reproduced from the description.

## 2. Number formats

Every stored or multiplied quantity is an 18-bit two's-complement word,
because the FPGA's hard multipliers are 18×18.

| quantity | format | notes |
|---|---|---|
| V1, V2, features, Y_des, u | Q0.17 | 12-bit ADC codes and 16-bit DAC codes are padded with zero LSBs |
| W_F, K | Q2.15 (`W_FRAC = 15`) | all published trials |
| Wu^-1 | Q4.13 (`WINV_FRAC = 13`) | most one-step trials; others used Q5.12, Q3.14 or Q2.15 |

A feature product (Q0.17 × Q0.17) is shifted right by 17 bits and
saturated back to Q0.17. The bracketed sum of the control law is added at
full precision, with W_FRAC + 17 fractional bits in a 48-bit accumulator.
It is then shifted and saturated to Q0.17, so that the last product is
again 18×18. Finally u is shifted by WINV_FRAC bits and saturated to Q0.17.
All reductions truncate toward minus infinity; none round. The flag
`law_sat` reports an update in which the bracket or u was clipped. This
happens, for example, when control is switched on far from the target.

ADC codes are taken to be offset binary (0x800 is 0 V), so the MSB is
inverted before padding. The DAC code is the top 16 bits of u with the sign
bit inverted: code 0x8000 means zero current. The package functions
`q_to_dac` and `dac_to_q` implement this mapping.

## 3. Datapath and schedule

```
                 +-------------+   V1,V2 (Q0.17)   +---------------+  O_F  +-------------+
 ADC codes ----->| adc_frontend|------------------>| ngrc_features |------>| control_law |--u--+
 (1 MS/s)        +-------------+                   +---------------+       +-------------+     |
                        |  raw codes                      ^ u_{i-1}         ^      ^           |
                        v                                 |                 |      | W_F,K,    v
                 +-------------+                          |        +-------------+ | Wu^-1   select --> dac_interface --> serial DAC
                 | capture_mem | (learning)               |        | desired_mem | |         (phase,
                 +-------------+                          |        +-------------+ |          ctrl_en)
                 +-------------+   training code          |                                    |
                 | perturb_mem |----------------------------------------------------------------+
                 +-------------+                          +--------------- applied u ----------+
   update_timer: one tick every 300 clocks
```

The system clock is assumed to be 60 MHz, so one update is 300 cycles.
Relative to the update tick T:

| cycle | event |
|---|---|
| T   | `tick`. The desired table and the training table are read; the latest ADC pair is taken |
| T+1 | V1, V2 frozen and converted; training code ready; sample recorded (learning phase) |
| T+2 | Y_des,i and Y_des,i+m ready; feature computation starts |
| T+3 | V1², d² and V1 - V2 ready |
| T+4 | feature vector ready |
| T+5 | e, W_F · O_F and u ready (3 cycles = 50 ns after the start); applied value chosen; DAC frame starts |
| T+6 | `u_valid`, `u_applied` updated |
| T+38 | DAC frame complete (16 bits at 30 MHz) |

The value that reaches the DAC in either phase is also fed back to
`ngrc_features` as u_{i-1} at the next update: the training code, the
control-law result, or zero.

The 5 µs update period is far longer than the computation. The loop
latency that matters in practice lies outside the FPGA: the ADC's
anti-aliasing filter and serial transfer, the DAC settling time (over
2 µs), and the voltage-to-current converter. That is why the ADC runs at
1 Msample/s while control runs at 200 kHz. The controller simply uses the
latest sample at each tick.

## 4. Two phases and three tables

The `phase` input selects the mode.

**Learning (`PHASE_LEARN`).** The loop is open. `perturb_mem` plays a
stored 4000-entry sequence of 16-bit DAC codes, one entry per update. The
sequence is low-pass-filtered noise under an envelope, so it repeats
smoothly. `capture_mem` records the frozen {V1, V2} ADC codes of each
update until 4000 words are stored. The host reads them back and fits W by
ridge regression offline. Entering this phase restarts the sequence and
re-arms the record.

**Control (`PHASE_CONTROL`).** The loop is closed. `desired_mem` supplies
the trajectory: a 4200-entry Q0.17 table, which repeats every 21 ms at
200 kHz. The table is read M entries ahead, and a chain of M+1 registers
delays the values. The chain then yields both Y_des,i+m (newest word) and
Y_des,i (oldest word). Entering this phase restarts the table at entry 0.
`ctrl_en` switches the output on and off. While it is low, the DAC
receives zero, but the law keeps running, so its delay registers are
current when control is switched on. The published experiments switched
control on at 7.5 ms and off at 80 ms.

The two tables that are played out load through simple write ports,
`des_wr_*` and `pert_wr_*`; the record is read through `cap_rd_*`. The learned weights `w_f`, `k_gain` and `wu_inv` are inputs.
In a fixed build they would be tied to constants, which is what the
original work did with its fitted values.

Published tasks and how they map onto the tables:

- **origin**: Y_des = 0 everywhere (a table of zeros).
- **two unstable steady states**: 0.571 · tanh(sin(0.0076 i) / 0.11). This
  switches between the two nonzero equilibria V1 ≈ ±0.57 V.
- **random waveform**: low-pass-filtered noise, shaped so that it repeats
  without a jump.

## 5. Top-level interface (`ngrc_controller`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (60 MHz assumed), synchronous active-low reset |
| `phase` | in | `phase_e` | learning or control |
| `ctrl_en` | in | 1 | apply the control law (control phase) |
| `adc_valid`, `adc_v1_code`, `adc_v2_code` | in | 1, 12, 12 | sample pair from the dual ADC |
| `w_f`, `k_gain`, `wu_inv` | in | 9×18, 18, 18 | learned model |
| `des_wr_en/addr/data` | in | 1, 13, 18 | desired-table write |
| `pert_wr_en/addr/data` | in | 1, 12, 16 | training-table write |
| `cap_rd_addr` → `cap_rd_data` | in/out | 12 → 24 | record read (1-cycle latency) |
| `cap_done`, `cap_busy`, `cap_count` | out | 1, 1, 12 | record status |
| `dac_sclk`, `dac_sync_n`, `dac_din` | out | 1 | serial DAC: frame while sync_n is low, MSB first, data stable at rising sclk |
| `u_applied`, `u_law`, `u_valid`, `law_sat` | out | 18, 18, 1, 1 | applied value, law result, update strobe, clipping |
| `tick`, `des_wrap`, `pert_wrap` | out | 1 | update strobe and table-wrap pulses |

Parameters, with their defaults: `UPDATE_DIV = 300`, `M = 1`,
`W_FRAC = 15`, `WINV_FRAC = 13`, `DES_DEPTH = 4200`, `PERT_DEPTH = 4000`,
`CAP_DEPTH = 4000`, `DAC_HALF = 1`. The three tables take about 235,600 bits
altogether. They are plain arrays with synchronous reads, so synthesis maps
them onto block RAM.

## 6. Files

| file | content |
|---|---|
| `rtl/ngrc_pkg.sv` | widths, `q_t`, `feat_idx_e`, `phase_e`, saturating multiply/subtract, DAC code conversion |
| `rtl/update_timer.sv` | 200 kHz update tick |
| `rtl/adc_frontend.sv` | latest-sample hold, freeze on tick, offset-binary to Q0.17 |
| `rtl/ngrc_features.sv` | two-stage feature pipeline with product reuse |
| `rtl/control_law.sv` | W_F · O_F, K e, Wu^-1 product, saturation |
| `rtl/desired_mem.sv` | desired trajectory table with M-step look-ahead |
| `rtl/perturb_mem.sv` | training perturbation playback |
| `rtl/capture_mem.sv` | training data record |
| `rtl/dac_interface.sv` | 16-bit serial DAC frame |
| `rtl/ngrc_controller.sv` | top level |
| `tb/*_tb.sv` | one self-checking testbench per module, plus the system tests below |

## 7. Simulation

Each testbench is self-checking and prints
`TB_RESULT checks=N failures=F`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/ngrc_pkg.sv tb/ngrc_controller_tb.sv \
          --top-module ngrc_controller_tb -o sim && ./obj_dir/sim
```

Substitute any other `*_tb`. The package must come first; `-y rtl` finds
the modules. Every test runs in a few seconds at the default sizes.

System-level tests close the loop around a plant model written in real
arithmetic in the testbench. The plant is a two-variable map with a cubic
term, in full-scale units:
V1' = 0.9 V1 - 0.5 (V1 - V2)³ + 0.125 u and V2' = V2 + 0.1 (V1 - V2).
The controller is given that plant's own coefficients as weights. Checks
are then exact predictions of the theory: after settling, the error must
stay below 0.005 of full scale. The tests include 12-bit ADC quantisation,
the serial DAC and the real cycle schedule.

- `ngrc_controller_tb` covers a full learning run. It checks every DAC word
  against the table, including one wrap, and every recorded word. It then
  runs control with the output off, control on for more than one
  repetition of the two-steady-state trajectory (RMS error about 5e-5 of
  full scale), and control off again. It checks the T+6 schedule on every
  update and counts each mechanism: phase switch, table wraps, record
  full, saturation, on/off.
- `ngrc_tasks_tb` runs the origin task from a distant start, and a smooth
  periodic random waveform with no energy above about 2.5 kHz.
- `ngrc_twostep_tb` runs `M = 2` on a plant with one update of actuation
  delay. Its two-step map is exactly representable, and it uses the
  u_{i-1} feature.

The weights the original experiment learned for the real circuit are not
published as numbers, so no test uses them. The tests show that the
datapath computes the control law correctly. They do not show how well it
controls the real circuit.

## Departures and assumptions

Taken from the source: the feature set and the product reuse; the control
law; the 18-bit Q formats; the 12-bit ADC and the 16-bit DAC with zero
padding; 200 kHz updates; 50 ns computation; the 30 MHz DAC clock; 4000
training points; the 21 ms desired-table period; and one- and two-step-ahead
prediction.

Chosen here:

- **Clock and schedule.** The system clock is 60 MHz. This is the rate at
  which 3 cycles give 50 ns and the DAC clock is clk/2. The cycle schedule
  of section 3 is this design's.
- **Arithmetic.** Truncation and saturation throughout. The bracket is
  reduced to Q0.17 before the final product. The accumulator is 48 bits.
- **Multipliers.** 16 multipliers, against the 18 the source reports (see
  section 1).
- **Converter codes.** The ADC is offset binary. The DAC code mapping is
  that of section 2. The serial DAC frame is generic (three wires, MSB
  first), because the converter part and its protocol are not specified.
- **Tables.** Tables and weights load through ports rather than being
  compiled in. The training sequence plays at the update rate. The record
  stores raw codes, stops when full, and is read through a plain port; the
  link to the host is not included.
- **Phases.** Both phases are in one design, selected by a port. The
  original may have used separate FPGA images.
- **Desired-table memory.** For the two-steady-state and random tasks the
  table takes 4200 × 18 bits. The source quotes only the origin-task
  memory (768 bits, one block RAM).

Not included: the ADC hard block and its IP core, the DAC chip, the analog
voltage-to-current converter, the circuit itself, and the offline ridge
regression. Their signals are the top-level ports.

The linear proportional controller that the original work compares against
is not part of this design.
