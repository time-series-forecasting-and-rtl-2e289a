# A memristive echo state network with on-chip readout training

An echo state network (ESN) forecasts a time series with three layers:
- a fixed random input layer;
- a fixed, sparse, random recurrent "reservoir" of leaky tanh neurons, which turns the input history into a rich state vector x(t);
- a linear readout with a sigmoid, which is the only trained part.

This accelerator computes the two matrix-vector products in memristor crossbars, in one analog step each. It trains the readout in place with least-mean-squares (LMS), adding weight decay and gradient sparsification. No ridge regression and no stored state history are needed, which suits edge devices.

This repository gives that accelerator as SystemVerilog:

* **The digital training controller** is synthesizable RTL. It sequences each time step, accumulates the gradients, decides which weights change, measures and retunes one memristor at a time, and alternates between the two devices of each weight.
* **The pulse converter** and the **flash-ADC encoder** are also synthesizable.
* **Every analog part** is a behavioural model with the real part's ports: the crossbars, the op-amp neurons, the leakage cell, the sample-and-hold circuits, the error/gradient front end and the ADC comparators. Analog signals are carried as 16-bit fixed-point numbers (12 fraction bits, so 1.0 V = 4096). That is enough to simulate the whole network end to end, including training, faults and wear-out.

The default size is the evaluated network: 1 input, 105 reservoir neurons, 1 output.

## The network equations

Per time step t, with input u(t) and previous state x(t-1):

```
xhat(t) = g( W_ri u(t) + W_rr x(t-1) )           g  ~ tanh
x(t)    = delta * xhat(t) + (1 - delta) * x(t-1)  leaky integration
yhat(t) = f( W_or x(t) )                          f  ~ sigmoid
```

When learning is enabled:

```
Er    = yhat(t) - y(t)
grad += x(t) (x) Er                              every step
every n_up steps (count % n_up == 0):
    grad[i] = 0 where |grad[i]| < theta          sparsification
    W_or   += -alpha * grad / n_up + lambda * W_or
    grad    = 0
```

For forecasting n_p steps ahead, the target y(t) is simply u(t + n_p), supplied by the host. `count` starts at 1 and increments every step.

## Weights as memristor pairs

Each weight is a pair of memristors, M+ and M-. The row driver applies +v to M+ and -v to M-. The column ends in an inverting amplifier with feedback resistor Rf. The column voltage is therefore `sum Rf*(G- - G+)*v`, and the weight is `Rf*(G- - G+)`.

A device is modelled by a programming state s = 0..41:
- s = 0 is 2 MΩ and s = 41 is 200 kΩ;
- 41 unit pulses take a device across its full range;
- conductance is linear in s.

With Rf = 1/(Gon − Goff), a pair gives the weight `(s- − s+)/41`, in [−1, 1] with steps of 1/41. The constant Goff parts cancel. This mapping lives in `esn_pkg` and `mem_crossbar`.

A weight is set to zero by making M+ equal to M- ("prune", the Ziksa scheme). This is how the reservoir's sparsity is programmed without a switch per cell. The same operation neutralises a pair with one failed device: the healthy device is set equal to the stuck one.

## Leaky integration without an extra amplifier

The leakage cell is three memristors:
- Mx runs from xhat;
- My runs from x(t-1);
- Mz runs from the common node to ground.

The node voltage is a weighted average:

```
delta     = (Mz||My) / ((Mz||My) + Mx)
1 - delta = (Mz||Mx) / ((Mz||Mx) + My)
```

The two coefficients add to exactly one only when Mz is much larger than Mx and My. `leakage_cell` evaluates both expressions as written, so a small Mz shows the resulting gain loss. Mx, My and Mz are global settings (ports `leak_rx/ry/rz`, in ohms). Example: 300 kΩ, 700 kΩ and 1 GΩ give delta ≈ 0.7.

## Storing signed states: the feedback circuit

Reservoir outputs are in [−1, 1], but the sample-and-hold (S/H) cannot hold a negative level. `feedback_sh` adds a DC offset (1.0 V) before sampling and removes it on playback. Every stored level is therefore in [0, 2] V; an assertion in the top checks it is never negative. The held copy serves as x(t−1) for the next step and as the readout's input during this step's training phase.

## One time step, cycle by cycle

`global_controller` runs this sequence for each `step_start`:

| phase | clocks | what happens |
|---|---|---|
| SAMPLE | 1 | input S/H captures u(t) |
| SETTLE | SETTLE_CYC+1 | crossbar, tanh clip and leakage cells settle to x(t) |
| HOLD | 1 | the feedback S/H circuits capture x(t) |
| READ | READ_CYC+1 | readout settles; `yhat_valid` strobes |
| GRAD | 2·NR·NO | if learning: gradient conversions, one weight at a time |
| COUNT | 1 | decide whether this is an update step |
| UPDATE | per weight | if learning and count % n_up == 0 (see below) |
| DONE | 1 | `step_done` strobes |

With the defaults, `yhat_valid` comes 8 clocks after `step_start`. A learning step without an update takes 8 + 2·105 + 2 = 220 clocks.

**GRAD.** A single error/gradient front end and a single 6-bit flash ADC are shared by all weights. For weight j→o, the front end forms `(yhat_o − y_o)·x_j` and the ADC converts it on the next clock. The signed code (offset binary, 32 = 0, 1 LSB = 1/32) is added to that weight's saturating 16-bit accumulator.

**UPDATE.** The weights are visited in order:

1. A weight whose |accumulator| < `theta` is skipped (`ev_sparse`). Skipping saves time and avoids pointless device wear.
2. Otherwise the controller picks M+ or M- from a per-weight toggle. Successive updates of a weight alternate between its two devices, which roughly doubles the array's lifetime.
3. A test voltage is applied to the chosen device, and the ADC reads a voltage proportional to its conductance G.
4. The controller forms `Phi = s·(−alpha·grad/n_up) + lambda·G`, with s = +1 for M- and −1 for M+. Decaying both devices of a pair decays their difference, so a negative `lambda` realises the weight-decay term.
5. `pulse_gen` turns |Phi| into a pulse whose length is proportional to |Phi|. The pulse moves the device up (set) or down (reset), one state per clock.

Only one device is ever being pulsed (assertion `a_one_pulse`). The accumulators are cleared at the end of the pass.

## The pulse converter

The analog circuit integrates a reference voltage from zero; a comparator keeps the pulse high while Phi exceeds the integrator voltage. `pulse_gen` is the clocked equivalent: the integrator adds `ramp_step` per clock, and the pulse lasts ceil(|Phi| / `ramp_step`) clocks. Use `ramp_step = 4096/41 ≈ 99` to make one pulse clock equal one device state, i.e. one weight step of 1/41.

## Faults and wear-out

Each crossbar accepts these operations on its programming port:
- write a state;
- prune a pair;
- make a device stuck-on or stuck-off;
- clear a fault.

Every training pulse counts one switching cycle against `ENDURANCE`, 10^9 by default. A device that reaches it freezes at its present state, `wearout` strobes, and later pulses and writes are ignored.

## Files

| file | kind | role |
|---|---|---|
| `rtl/esn_pkg.sv` | package | number formats, device constants, programming op codes |
| `rtl/esn_accel.sv` | top | wires all blocks, assertions |
| `rtl/global_controller.sv` | RTL | step sequencer and LMS training controller |
| `rtl/pulse_gen.sv` | RTL | Phi-to-pulse-width converter |
| `rtl/thermo_encoder.sv` | RTL | flash-ADC thermometer encoder |
| `rtl/flash_adc.sv` | model + RTL | comparator ladder, then `thermo_encoder` |
| `rtl/mem_crossbar.sv` | model | 2M crossbar, programming, pulses, faults, endurance |
| `rtl/tanh_neuron.sv` | model | reservoir op-amp, clip at ±1 V |
| `rtl/leakage_cell.sv` | model | three-memristor leaky integrator |
| `rtl/feedback_sh.sv` | model | DC-offset S/H for x(t−1) |
| `rtl/sample_hold.sv` | model | input S/H with optional droop |
| `rtl/sigmoid_neuron.sv` | model | readout neuron, hard sigmoid |
| `rtl/training_frontend.sv` | model | error, gradient product, conductance test |

Each file opens with a description of its function, timing, and which choices are this implementation's own.

## Using the top level

1. Reset with `rst_n` low.
2. Program the reservoir crossbar through `res_prog_*`:
   - rows 0..NU−1 are the inputs and rows NU..NU+NR−1 the recurrent lines;
   - columns are neurons;
   - write both devices of every pair, then prune the pairs that should be zero.
3. Program the readout crossbar through `ro_prog_*` (rows are neurons, columns outputs).
4. Set `leak_rx/ry/rz`, `alpha`, `lambda` (signed, 12 fraction bits), `theta` (ADC LSBs), `nup_log2` (n_up = 2^nup_log2) and `ramp_step`.
5. For each sample:
   - drive `u_in` and, when learning, `y_target`;
   - pulse `step_start` while `ready` is high;
   - read `yhat` at `yhat_valid`;
   - wait for `step_done`.

Configuration must be stable during a step.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`. To build one with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/esn_pkg.sv tb/tb_esn_full.sv --top-module tb_esn_full -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_esn_full` | the full-size 1×105×1 network, all defaults (≈25 s). Programs random sparse weights. Checks `yhat` and all 105 states against a floating-point model of the equations for 20 steps. Then learns a one-step-ahead forecast of a two-tone series for 300 steps and requires the error to drop. Counts every mechanism. |
| `tb_esn_accel` | the same test with 8 neurons and an endurance of 40 pulses, so that devices wear out |
| `tb_esn_mackey_glass` | the full-size network learning a 50-step-ahead Mackey–Glass forecast on chip for 1,200 samples (≈20 s). Reports the wMAPE of the first and last quarter after a 100-sample washout. Requires the last quarter to beat the best constant forecast (the series mean). The result is about 0.27 against 0.38 for the mean. The hardware-tuned hyperparameters behind the much lower errors of the original analog system are not known. |
| `tb_esn_narma10` | the same 1,200-sample run on a NARMA10 series, 50 steps ahead. Fifty steps ahead this series is close to unpredictable. The model reaches a wMAPE of about 0.49, which does not beat the mean forecast (0.40). The test therefore only checks that training runs and stays stable: the error must stay below twice the mean forecast's. A reversed update sign gives above 2. |
| `tb_global_controller` | the controller against a reference of the gradient sums and of Phi, including step timing, sparsification and M+/M- alternation |
| `tb_<block>` | every other block against an independent reference |

The analog models are combinational in fixed point: one clock of settling is enough, and `SETTLE_CYC`/`READ_CYC` only stand in for the real settle times.

## Workloads

All evaluated benchmarks use the same 1-input, 105-neuron, 1-output network, which is this RTL's default:
- regional energy load (hourly data, 145,366 samples);
- daily minimum temperature (3,605 samples);
- Mackey–Glass (4,000 samples);
- NARMA10 (4,000 samples).

The two synthetic series are generated inside `tb_esn_mackey_glass` and `tb_esn_narma10`. The 100-step horizons are the same tests with `NP = 100`. The two recorded data sets are not included. Samples are streamed from the host one per step; nothing is stored on chip. The forecast horizon (50 or 100 steps) is only a matter of which future sample the host presents as `y_target`. A 1×20×1 network is `NR = 20`.

## What is this implementation's own, and how far to trust it

The behaviour of the network, the training rule and the structure of every block follow the source design. These details are choices made here:

* **Number formats.** Fixed point (12 fraction bits); ADC range ±1 V with mid-tread rounding; 16-bit gradient accumulators.
* **Analog models.** The tanh is an exact clip at ±1 V and the sigmoid is the hard sigmoid `clamp(0.5 + s/4, 0, 1)`. The real circuits are smooth op-amp characteristics that are not specified.
* **Device model.** The memristor is an ideal 42-level device that moves one level per pulse clock. The continuous VTEAM-type device law, cycle-to-cycle and device-to-device variation, and S/H droop (available as `SH_LEAK`, default 0) are not reproduced. Accuracy figures of the original analog system should therefore not be expected from this model.
* **Update rule.**
  - Sparsification compares the *magnitude* of the gradient with theta. The algorithm as written compares the signed value, but the accompanying description speaks of gradients "above a threshold".
  - The decay term is applied per device with a signed `lambda`, following the update formula literally (`+ lambda·W`).
  - n_up is a power of two.
* **Conductance test.** The gain of the test path is chosen so the largest conductance reads 31/32 V. The controller uses the ADC code directly as conductance, so no divider is needed.
* **Shared converter.** One gradient multiplier and one ADC are time-shared over all weights.
* **Readout input.** The readout reads the held reservoir state after sampling, rather than a bypass ahead of the S/H; the values are the same.
* **Alternation and sequencing.** The per-weight M+/M- toggle, the phase sequence and the handshake are this implementation's own.
* **Programming.** Initial random weights and reservoir pruning are loaded by the host through the programming ports, as one-clock writes. The multi-pulse write scheme used on silicon is not modelled.
* **Workload scaling.** The source scales every benchmark to [0, 1]. The workload testbenches keep the target in [0, 1], the sigmoid's range, but drive the input as 2u − 1. The reason is that the reservoir's states stay small for a [0, 1] input. Then most gradient products fall below one ADC LSB, and training stalls. For a one-step Mackey–Glass forecast, a [0, 1] input gives a wMAPE of 0.28; the wider swing gives 0.10. At 50 steps the two give 0.29 and 0.27.
* **Not built.** The optional output-to-reservoir feedback (W_fb) is not part of this design.
