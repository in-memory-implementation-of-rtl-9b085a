# An SRAM-based in-memory neural network that trains itself

This design is a multilayer perceptron that keeps its weights in a standard
6T SRAM array. It computes feed-forward, backpropagation and the weight
update in analog circuits placed around the array. Weights are read out of
the array once, at the start of training, by a multi-row "functional read".
That read turns each 4-bit signed weight straight into a bit-line voltage
difference. From then on each weight lives as a voltage on a small sampling
capacitor next to its column, and every training sample updates it in
place. The SRAM is written only once more, when training ends: a signed
flash ADC per layer converts the trained analog weights back to 4-bit codes.

The network built here is the 4-5-3 Iris classifier:

- 4 inputs;
- one hidden layer of 5 ReLU neurons;
- 3 outputs feeding a softmax;
- learning rate 0.1, 500 epochs of 120 samples.

The layer is generic in its sizes (M inputs, N neurons). Deeper networks
are built by chaining more layers.

The analog parts are behavioural models. Their ports and internal nodes
carry voltages and currents as `real` values. The digital parts are
ordinary synthesizable RTL:

- the SRAM array;
- the word-line pulse generator;
- the ADC's encoder;
- the control sequencer.

Analog and digital parts share one clock.

## Signal conventions

| quantity | representation |
|---|---|
| weight code | 4 bits `b3..b0`, 1's complement: +3 = `0011`, -3 = `1100`; range -7..+7 |
| weight voltage | signed real, 1 LSB = V_REF/7 = 0.496/7 = 70.9 mV; full scale ±0.496 V |
| activations, errors, gradients | signed real volts |
| multiplier output | real amperes, 1 V × 1 V ≈ 1 mA, turned into volts by 1 kΩ resistors |
| S[1:0] (`sm_sel_e`) | 00 idle, 01 feed-forward, 10 weight update, 11 backpropagation |

`imc_ann_pkg` holds these constants and the `sm_sel_e` enum.

## How a weight becomes a voltage: the functional read

Each layer's array (`sram_bca`) has one column per weight. For a layer
with M inputs and N neurons there are N banks of M columns: column
`c = k*M + j` holds the weight from input j to neuron k. The four weight
bits sit in the bottom four rows, with b0 lowest: bit i is in row
`N_ROW-1-i`. The remaining rows are ordinary storage, reached like any
SRAM through a registered row port. The same row port loads the initial
weights.

A read works like this:

1. Precharge both bit lines, BL and BLB, to V_PRE = 1 V (`pre`, one cycle).
2. Raise all four weight word lines at once (`fr_wl_driver`). Word line i
   stays on for 2^i clock cycles: 1, 2, 4 and 8 cycles.
3. Each enabled cell discharges one line by ΔV per cycle
   (`bitline_fr`): a cell holding 1 pulls down BLB, a cell holding 0
   pulls down BL.
4. After the 8 cycles:
   - BLB has dropped by ΔV times the unsigned code value;
   - BL has dropped by ΔV times the value of the inverted code.

For a 1's complement negative weight the inverted code is the magnitude.
So the smaller of the two drops is always the magnitude. Which line has
the smaller drop gives the sign: BLB for a positive weight, BL for a
negative one. The start-to-done time is 1 + 8 + 1 = 10
cycles.

ΔV is set to one ADC LSB (V_REF/7). With that choice, a weight read out
and a weight written back through the ADC use the same scale, and a
weight survives a read/write-back cycle exactly. For example, code +5 leaves
BLB at 1 − 5·0.0709 V and BL at 1 − 10·0.0709 V.

## Signed weight calculation and the weight store

`swc_unit` does three things:

- A comparator compares the two lines. `s_w = 1` when V_BLB < V_BL,
  which means the weight is negative.
- A 2:1 mux picks the line that holds the magnitude: BL when `s_w = 1`,
  BLB when `s_w = 0`.
- An amplifier stage outputs `±(V_PRE − V_mux)`.

The result is the signed weight voltage.

`wu_unit` is the per-weight store and updater. It is built from three
switched capacitors, driven by the phases below.

| phase | action |
|---|---|
| φS | C_S ← signed weight from the SWC (once per run, after the read) |
| φB | C_B ← Δw from the multiplier |
| φL | C_L ← (C_S + C_B)/2, charge sharing |
| φU | C_S ← 2·C_L, through a gain-2 buffer |

After φU, C_S holds w + Δw. C_S is always the weight the rest of the layer
sees. The stored value is clamped to ±1 V, the supply rails.

## One multiplier per weight, three jobs

Every weight has a signed multiplier unit (`sm_unit`). It wraps a
four-quadrant analog multiplier (`fq_multiplier`). S[1:0] sets the
multiplier's inputs and where its output goes.

| S | input 1 | input 2 | output goes to |
|---|---|---|---|
| 01 | w | a (layer input) | activation-potential summing node (current) |
| 11 | w | δ (neuron's local gradient) | backpropagation summing line (current) |
| 10 | a | δ | WU unit as Δw = η·i·R (voltage) |
| 00 | a | a | nowhere |

The multiplier models a MOSFET in its linear region:

- the first input drives the gate overdrive;
- the second input, divided by A = 10, is the drain-source voltage;
- the sign of the first input picks the polarity of the output stage;
- a current gain K_i = 250 and a 1 kΩ load give 1 mA (1 V) for 1 V × 1 V.

The output is `i = (v1·v2 − 0.5·v2·|v2|/A · sgn v1) / R`. The second term
is the device's square-law error, up to 5 % of full scale. It is kept on
purpose: it is the multiplier's real non-linearity, and the testbenches
allow for it. At 1 V × 1 V the error is 0.5/A V in every quadrant: 50 mV
at A = 10 and 5 mV at A = 100. These match the worst-case error reported
for the transistor-level multiplier over that range of A. A larger A would
need a larger K_i to keep the 1 V full-scale output.

## Neurons

`act_potential` sums the M product currents of one bank. It converts the
sum to a voltage through R = 1 kΩ and samples it on φOUT. The held value
h_k stays on its capacitor through backpropagation and the update, so the
ReLU derivative is still available then.

`relu_unit` has one comparator (h > 0) and two muxes:

- a = max(0, h);
- δ = incoming gradient when h > 0, otherwise 0.

In an output layer (`ann_layer` with `RELU = 0`) the activation function
is outside the layer. h goes out and the activation comes back in. Here
that activation is the softmax, which the network's surroundings supply.

`bp_block` sums, for each input j, the currents δ_k·w_jk over all N banks.
That gives `S_j = Σ_k δ_k w_jk`, which goes back to the previous layer as
that layer's incoming gradient.

## Error path

`error_unit` computes, for each output l:

- e_l = t_l − y_l with a subtractor;
- e_l² with a complementary NMOS/PMOS square-law pair.

The square-law currents are summed into `V_E = −R1·k/2·Σ e_l²`, which with
the assumed k = 2 mA/V² is `−Σ e_l²`. The output layer's local gradients
are the errors e_l themselves. With a softmax output and cross-entropy
loss this is the exact gradient, so no multiplier is needed.

`error_monitor` adds |V_E| over an epoch. At each epoch end it compares
the total with the previous epoch's total. If the error did not decrease,
it raises `not_decreasing` to the sequencer.

## Writing weights back: signed flash ADC

`signed_flash_adc` works as follows:

- A resistor ladder from −V_REF to +V_REF feeds 14 comparators.
- The thresholds sit at ±(i − ½)·V_REF/7 for i = 1..7, so the ADC rounds
  to the nearest LSB.
- b3 comes from the first negative comparator, so b3 = 1 for inputs below
  −½ LSB.

`signed_adc_encoder` is the digital part:

- two 8-to-3 priority encoders, one enabled by b3 = 0 and the other by
  b3 = 1;
- the negative encoder's output is inverted to give the 1's complement.

The codes run from `0111` (+7) down to `1000` (−7). Inputs beyond ±V_REF
saturate at ±7.

One ADC serves each layer. During write-back the sequencer steps a column
address through all columns, one per cycle. The ADC converts that
column's C_S voltage, and the array writes the 4-bit code into that
column's weight rows.

## Sequencing (`ann_controller`)

The sequence for a run is below.

1. `start` (`train` = 1 for training, 0 for inference).
2. Functional read: `fr_start`, then wait for `fr_done` (10 cycles).
3. φS for one cycle.
4. For every sample:
   - LOAD: 1 cycle, inputs and targets applied.
   - FF: S = 01, 2 cycles per layer. φOUT of that layer fires on the
     second cycle.

   In inference mode each sample then ends:
   - RES: 1 cycle, `result_valid`. The output potentials are valid.

   In training mode each sample continues:
   - ERR: S = 00, 2 cycles. `err_sample` fires on the second cycle, and
     the output layer's gradient hold (φDL[1]) fires with it.
   - BP: S = 11, 2 cycles per layer, going from the output back to the
     first layer. On the second cycle of layer K, the gradient hold of
     layer K−1 (φDL[K−1]) fires.
   - WU: S = 10, φB, φL, φU in three cycles.
5. After L samples, EPOCH (1 cycle, `epoch_end`). The run stops when
   `stop_en` is set and the error did not decrease, or after P epochs.
   Otherwise the next epoch starts.
6. Write-back (training only): one column per cycle.
7. DONE.

Cycle counts for the 2-layer network:

| item | cycles |
|---|---|
| one training sample | 1 + 2·2 + 2 + 2·2 + 3 = 14 |
| one inference sample | 1 + 2·2 + 1 = 6 |
| overhead per run | 6 (start, read, φS and done) |
| full Iris training (P = 500, L = 120) | 840,000 + 500 + 20 + 6 |

`sample_idx` and `epoch` tell the surroundings which sample to present.

### The gradient hold (a departure)

The weight update uses δ of every neuron. But δ only exists while S = 11:
it is the product of the incoming gradient sum and the ReLU derivative,
and the incoming sum is itself a backpropagation output. Once S switches
to 10, the next layer's multipliers stop producing gradient currents. So
each layer samples its incoming gradient on a capacitor (φDL) at the end
of its backpropagation step. The update then uses those held values. The
source describes the update as following the backpropagation of all
layers, but does not show where δ is kept in the meantime. The hold is
this design's addition.

### Early stop (an interpretation)

The source says training stops when the error stops decreasing, without
defining the comparison. Here the comparison is made once per epoch, on
the epoch's summed |V_E|, and only when `stop_en` is set. Otherwise
training runs all P epochs.

## Top level (`imc_ann_top`)

The top contains:

- one shared word-line driver;
- the sequencer;
- the hidden layer (4→5, ReLU);
- the output layer (5→3);
- the error unit;
- the error monitor.

It is wired as follows:

- x → hidden layer → a1 → output layer.
- The output potentials leave the top on `h_out`. The softmax result must
  come back on `y_in`, and the error unit compares `y_in` with `t`.
- e is the output layer's gradient.
- The output layer's `s_out` is the hidden layer's incoming gradient.
- The hidden layer's own `s_out` would feed a third layer and is unused.

The `mem_*` port is the conventional SRAM row interface of either array,
selected by `mem_layer`. It is used to load initial weights before
`start` and to read codes back after training. `x` and `t` must be held
for the sample named by `sample_idx`, from its LOAD cycle until its
update or result.

Parameters and their defaults:

| name | default | meaning |
|---|---|---|
| N0, N1, N2 | 4, 5, 3 | layer widths |
| P | 500 | epochs |
| L | 120 | samples per epoch |
| N_ROW | 16 | rows per array |
| ETA | 0.1 | learning rate |

## What is taken from the source and what is not

These follow the source design:

- the weight format (4-bit, 1's complement, column-major, b0 at the
  bottom);
- the binary-weighted word-line pulses, with the MSB on for 8 periods;
- the sign comparator and magnitude mux;
- the four-phase capacitor update;
- the multiplier routing by S[1:0] and the learning rate on the update
  path;
- current summing for potentials and gradient sums;
- the ReLU with gradient mux;
- the subtract-and-square error circuit;
- the signed flash ADC with its two priority encoders;
- the numbers V_PRE = 1 V, V_REF = 0.496 V, B_W = 4, K_i = 250, R = 1 kΩ,
  η = 0.1, the 4-5-3 network and 500 epochs.

The samples per epoch (120) are derived from the stated time per epoch
divided by the time per iteration.

These are this design's own choices:

- **One clock period = one unit pulse width T_0 (0.3 ns).** Every other
  step gets a fixed small number of cycles. The real analog settling
  times are much longer than one T_0 (the error block settles in hundreds
  of ns), so the cycle counts describe the sequence, not the speed of the
  analog circuits.
- **ΔV per read unit = one ADC LSB.** The array's discharge rate is not
  given numerically.
- **Multiplier input divider A = 10 and the square-law error.** The
  divider's value is not given.
- **Square-law constant k = 2 mA/V² and threshold voltages 0.4 V** in the
  error unit.
- **Array height N_ROW = 16.** Only the 4 weight rows matter to the
  network.
- **The gradient hold φDL, the per-epoch early-stop rule, and S = 00
  during the error step.**
- **One ADC per layer, converting one column per clock.**
- **The weight clamp at ±1 V.**
- **No biases.** None appear in the described circuits.
- **A conflict resolved.** The source's control-signal table puts η on
  both the update and the backpropagation outputs. Its figure and text
  put it only on the update path (a gain after the multiplier). This
  design follows the figure and text.

Not built:

- the softmax stage with its converters, which the source takes from
  another work;
- the transistor-level bit cell;
- the interconnect wires, which are just nets here.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. Shared
macros are in `tb/tb_common.svh`.

- Unit benches compare against independently computed values: bit-line
  voltages, sign and magnitude, the update algebra, the multiplier's
  formula, all ADC codes, and the cycle-exact S[1:0] and phase sequence of
  the controller.
- `tb_ann_layer` drives a 2×2 layer by hand. It goes through load, read,
  feed-forward, backpropagation, update, write-back and re-read.
- `tb_imc_ann_top` is the end-to-end bench at P = 30. A second copy with
  η = 0 and early stopping on checks the early-stop path. It counts every
  mechanism and fails if one never happened:
  - functional read;
  - feed-forward;
  - error sample;
  - backpropagation;
  - update phases;
  - epoch end;
  - write-back with positive and negative codes;
  - ReLU on and off;
  - inference results;
  - early stop.
- `tb_iris_full` runs the top at all default parameters: 500 epochs of 120
  samples, write-back, then inference on the 120 training and 30 test
  samples with the stored 4-bit weights. It takes about 10 s in Verilator.

The Iris benches generate their data with `tb/iris_like_data.svh`:

- 150 synthetic records drawn from per-class Gaussians with the means and
  standard deviations of the real Iris set;
- a fixed pseudo-random generator, so every run is the same;
- features scaled to −1..+1 V;
- 120 records for training, 30 for test.

They are not the original records. The bench supplies the softmax, with a
gain of 3 per volt on the output potentials. Initial weights are random
codes in −3..+3.

Results:

| bench | train accuracy | test accuracy |
|---|---|---|
| full-size run, after write-back | 113/120 (94 %) | 28/30 (93 %) |
| P = 30 run | 95 % | 93 % |

The source reports about 99 % / 96.7 % on the real data. With inputs
scaled to 0..1 V instead of ±1 V, this bias-free network stays near 66 %.

To run a bench:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
  --top-module tb_iris_full rtl/imc_ann_pkg.sv tb/tb_iris_full.sv
./obj_dir/Vtb_iris_full
```

## Trust and limits

- The analog models are ideal apart from the multiplier's square-law term
  and the clamps. They have no noise, no leakage, no mismatch and no
  settling. Their numbers check the algorithm and the data flow, not
  circuit performance.
- Accuracy depends on the input scaling and the softmax gain, which the
  source leaves open.
- The lint tool reports the reset as used both synchronously and
  asynchronously. That comes from the controller's assertions, which are
  disabled during reset. It is not a circuit issue.
