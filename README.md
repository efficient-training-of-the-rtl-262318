# Memristive deep belief net with mixed-signal RBM layers

A deep belief net (DBN) is a stack of restricted Boltzmann machines (RBMs).
Each RBM has binary visible and hidden neurons joined by one weight matrix,
and it is trained by contrastive divergence (CD): sample the hidden layer
from the data, reconstruct the visible layer from that sample, sample the
hidden layer again, and move every weight by `v_i*h_j - v'_i*h'_j`.

This design builds an RBM in hardware around one observation: every
quantity the training needs is binary or ternary. The neuron states are 0
or 1, so a memristor crossbar can do the vector-matrix multiplication (VMM)
with a plain level shifter at its inputs (a 1-bit DAC). A noisy comparator
at each output (a 1-bit ADC) then samples the neuron directly. No
multi-bit converter and no sigmoid circuit is needed. The CD element is
-1, 0 or +1, so a small signed counter per synapse can add it up. The
memristors are never tuned by read-and-verify. When a synapse's counter
reaches +CD_th or -CD_th, the memristor gets one identical potentiating or
depressing pulse and the counter starts again from zero. The crossbar only
computes and the counters only accumulate. As a result, device
non-idealities (few conductance levels, non-linear and asymmetric updates,
write noise) cost little accuracy. The memristors also see about a hundred
times fewer writes than they would if every CD element were written
directly.

The RTL here covers the digital part completely: the CD counter arrays,
the per-layer sequencing, the greedy layer-by-layer training schedule and
the inference path with repeated-sampling vote. The analog part (crossbar,
reference cells, noise sources, trans-impedance amplifiers, comparators)
is given as behavioural SystemVerilog models, so the whole DBN simulates
end to end in Verilator.

## Network

| RBM | visible units | hidden units | weights |
|-----|---------------|--------------|---------|
| RBM1 | 784 (binarized 28x28 MNIST image) | 500 | w1 |
| RBM2 | 500 (hidden 1) | 500 | w2 |
| RBM3 | 500 (hidden 2) + 10 (one-hot label) | 2000 | w3 (hidden-2 rows), w4 (label rows) |

Each RBM is one `rbm_layer` with its own crossbar and its own counter
array. This gives 1,662,000 synapses and as many counters.

**Training** is greedy. RBM1 is trained for a number of epochs over the
image set. Then RBM2 is trained on RBM1's sampled hidden states, then RBM3
on RBM2's hidden states together with the label. No hidden states are
stored between images. For every image, the layers below the one being
trained run one forward pass each to produce its input. The neuron noise
is always on during training.

**Inference** unfolds the top RBM. The path is image → w1 → H1 → w2 → H2
→ w3 → H3 → w4 → label. It is three forward passes (the label rows of
RBM3 are driven with 0), then one backward pass of RBM3 whose label rows
produce a one-hot label. With the noise off, one pass is deterministic
and fast. With the noise on, every pass is a random sample. Repeating it
and taking the most frequent label is slower but more accurate: the
published simulations give about 95 % deterministic and 97 % after 50
passes.

## One CD step inside a layer

This is the core of the design. `rbm_ctrl` runs it and `rbm_layer` wires
it. Four state registers hold `v`, `h`, `v'` and `h'`. The crossbar is read
in three phases. Each phase takes three clocks: read the array, fire the
comparators, capture the sampled states.

| clock (after `start`) | strobe | effect |
|---|---|---|
| 1 | `ld_v` | input vector into `v` |
| 2 | `xb_fwd` | column currents I_j = Σ V_i G_ij and reference current from `v` |
| 3 | `smp_hid` | hidden comparators: h_j = [I_j − I_ref ≥ I_noise] |
| 4 | `cap_h` | `h` captured |
| 5 | `xb_bwd` | row currents from `h` (columns driven, rows read) |
| 6 | `smp_vis` | visible comparators; label rows one-hot |
| 7 | `cap_vr` | `v'` captured |
| 8 | `xb_fwd` (`fwd_src`=1) | column currents from `v'` |
| 9 | `smp_hid` | hidden comparators |
| 10 | `cap_hr` | `h'` captured |
| 11 | `cd_start` | counter array starts |
| 12 … 11+M | — | one visible row per clock: counters of that row updated, pulses sent |
| 13+M | `done` | |

The forward read drives the rows and senses the columns. The backward
read drives the columns and senses the rows, with comparators on the
visible side. The comparator decides
`h_j = 1` if `I_j − I_ref ≥ I_noise`. `I_ref` comes from a line of cells
held at `G_ref`. The weight is therefore `w_ij = G_ij − G_ref`. The
Gaussian noise current turns the comparator into a stochastic neuron
whose firing probability is a smooth (probit, close to sigmoid) function
of the weighted sum.

Other layer commands: `LC_FWD` runs clocks 1–4 and is done at clock 5.
`LC_BWD` runs the backward phase from the `h` already held, done at clock
4. `LC_INIT` initializes the weights and clears the counters in M+3
clocks.

## The CD counter array

`cd_counter_array` stores one signed counter per synapse, organised as
M rows of N counters. An accumulation pass visits row `i` in clock `i`
and updates all N counters of the row at once:

```
c  = cnt[i][j] + (v[i]&h[j]) - (v'[i]&h'[j])      // -1, 0 or +1 added
if (c >=  TH) { pot[j] = 1; cnt[i][j] = 0; }      // one potentiating pulse
else if (c <= -TH) { dep[j] = 1; cnt[i][j] = 0; } // one depressing pulse
else cnt[i][j] = c;
```

In the next clock the row's `pot`/`dep` masks go to the crossbar as
`upd_row`, `upd_pot` and `upd_dep`. This is the sign of ΔG for each cell.
The crossbar applies one identical pulse to each marked cell. A pass
over an M-row layer takes M clocks. With TH = 64 a counter needs a sign
and six magnitude bits (7 bits, range −64…63). A `clear` pass zeroes the
array row by row. This must be done once before training, because the
counters have no reset of their own.

Row-serial processing is this design's choice; the method only fixes the
arithmetic. A fully parallel array (every counter updates in the same
clock) would have the same behaviour with a one-clock pass. Only the
row loop in `cd_counter_array` would change.

## Analog parts (behavioural models)

`memristor_crossbar` holds the conductances as reals (nS). It returns
currents as 64-bit integers in fA, and with integer-valued conductances
the VMM is exact. Pulses follow the empirical device model of the
method:

```
ΔG_pot = [ (Gmax−Gmin)/(1−e^(−αp)) − (G−Gmin) ] · (1 − e^(−αp/Np))
ΔG_dep = −[ (Gmax−Gmin)/(1−e^(−αd)) − (Gmax−G) ] · (1 − e^(−αd/Nd))
```

α = 0 means the linear device, (Gmax−Gmin)/N per pulse. There is an
optional cycle-to-cycle spread σ = γ·ΔG, and results are clamped to
[Gmin, Gmax]. Defaults: ideal linear device with 20 levels, Gmin = 1 µS,
Gmax = 101 µS (a 5 µS step), G_ref midway, read voltage 0.1 V. Initial
weights are G_ref plus a random offset of up to one step.

The other device imperfections are parameters too, all off by default:

| parameter | effect |
|---|---|
| `GAMMA` | cycle-to-cycle: each pulse's step gets a Gaussian spread of γ·ΔG |
| `D2D_SD` | device-to-device: each cell draws its own αp, αd from a Gaussian of this σ at `init` (clipped at 0) |
| `YIELD` | a fraction 1 − YIELD of the cells is stuck, half at Gmin and half at Gmax, and ignores pulses |
| `READ_NOISE` | each cell current on a read varies by this fraction of itself; a line adds up to σ = READ_NOISE·V_R·√ΣG² |
| `DIFF_PAIR`, `PAIR_INC` | every synapse is two devices, w = G⁺ − G⁻, for devices that move gradually in one direction only |

With differential pairs and `PAIR_INC = 1` (phase-change-like, conductance
only rises gradually) both devices start at Gmin; potentiation pulses G⁺
up and depression pulses G⁻ up. With `PAIR_INC = 0` (oxide-RRAM-like,
conductance only falls gradually) both start at Gmax; potentiation pulses
G⁻ down and depression pulses G⁺ down. The currents are reported as
I_ref + Σ V·(G⁺ − G⁻), so the comparators see the same I − I_ref as with
single devices. A pair that has saturated stays saturated: no refresh
scheme is modelled.

Binary inputs mean each row is at 0 or V_R, so a non-linear I-V curve
would only scale the cell current at one voltage; the model keeps Ohm's
law.

`neuron_sampler` models a group of noise sources, TIAs and comparators.
The default noise σ is 8.5 µA, about 17 pulse steps, which puts one step
at roughly 0.1 on the sigmoid's input scale. The last `N_SOFT` neurons
of a group (the 10 labels of RBM3) are a winner-take-all: the neuron with
the largest noisy current fires. This gives exactly one label per sample,
as the softmax labels require.

The models use `$urandom`, reals and `$exp`. They are for simulation
only. In a chip they are replaced by the analog macros with the same
ports.

## Top level: `dbn_top`

Operations are accepted with `op_valid`/`op_ready`:

* `OP_INIT`: all layers initialize weights and clear counters (785+2 clocks at full size).
* `OP_TRAIN`: greedy training from layer `op_layer` (1…3) up to RBM3.
  Each layer gets `cfg_epochs` epochs of `cfg_images` images. Images
  arrive on `img_valid`/`img_ready` with `img` and `img_label`.
  `cur_layer`, `cur_epoch` and `cur_image` show the position.
* `OP_INFER`: one image, `cfg_repeats` passes with noise `cfg_noise`.
  `res_valid`/`res_label` give the result. `smp_valid`/`smp_label` show
  every pass's label sample.

`op_done` pulses at the end of each operation. The per-layer counts
`n_pot`, `n_dep` and `n_pulses` give the write statistics. The crossbar
model also counts writes per cell. For each layer, `max_cell_pulses`
reports the most writes any one device has received since `OP_INIT`, and
`n_cells_written` how many devices have been written at all. These two
numbers measure the endurance load that the counter threshold is meant
to reduce: the larger CD_th, the fewer and rarer the writes.

Training progress is visible on the chip. After every CD step,
`rec_valid` pulses. `rec_err` then gives the number of data units whose
reconstruction v' differs from the input v. `rec_lab_err` gives the same
count for the label units of RBM3: 0 or 2, because both label vectors are
one-hot. Averaged over an epoch, this is the reconstruction error that
should fall as a layer learns. The two counts are popcounts of v XOR v',
taken while both vectors are still held in the layer's registers.

Clocks per image at full size, from one image handshake to the next:
RBM1 799, RBM2 522 (7 for the RBM1 pass, then 515), RBM3 539. An
inference takes 27 clocks per pass, plus one.

## Sizes and what the defaults hold

| workload | needed | built (defaults) |
|---|---|---|
| MNIST DBN 784-500-(500+10)-2000, 30 epochs of 60,000 images per RBM, CD_th = 64 | 1,662,000 synapses and counters, counts up to 60,000 and 30 | same; 16-bit image and 5-bit epoch counters |
| inference, deterministic and 50-pass | up to 50 passes | 6-bit repeat count, 6-bit vote counters |
| CD_th sweep 1 … 256 | 1- to 9-bit counters | parameter `TH` (default 64) |
| device fits (SiGe epiRAM, PCMO, ECRAM) with CD_th = 128 | device parameters, 8-bit counters | crossbar parameters; `TH` = 128 by override |
| OxRRAM and PCM as differential pairs | two devices per synapse | not built |

## Departures from the method and choices made here

* The counter restarts at zero after it fires. The published counter
  traces show this, but the text does not state it.
* Counter width: "6-bit counter" for CD_th = 64 is read as six magnitude
  bits plus a sign.
* The backward read uses a reference row of G_ref cells. Only a reference
  column is described.
* Label neurons use winner-take-all over the noisy currents instead of an
  explicit softmax circuit. The written softmax formula has `e^(−x)`,
  opposite in sign to the sigmoid neurons. The usual sign is used here:
  the largest current is most likely to win.
* The timing (three clocks per phase, row-serial counter pass), the
  command set, the handshakes and all analog values (Gmin, Gmax, V_R,
  noise σ, initial spread) are this design's own.

## Not built

* Wake-sleep fine-tuning. It needs duplicated generative weight arrays
  (w1', w2') and 20 Gibbs iterations in the top RBM.
* Per-device fitted parameters for the oxide-RRAM and phase-change
  devices. The differential-pair model is there, but not their numbers.
* The data set. Images and labels arrive over the image port.

## Files

| file | contents |
|---|---|
| `rtl/dbn_pkg.sv` | sizes, CD threshold, command enums, CD element function |
| `rtl/cd_counter_array.sv` | signed CD counters, threshold and pulse requests |
| `rtl/rbm_ctrl.sv` | phase sequencer of one RBM layer |
| `rtl/rbm_layer.sv` | one mixed-signal RBM layer |
| `rtl/label_vote.sv` | vote counter for repeated-sampling inference |
| `rtl/dbn_top.sv` | three layers, greedy training and inference sequencer |
| `rtl/memristor_crossbar.sv` | behavioural crossbar with device model |
| `rtl/neuron_sampler.sv` | behavioural noise/TIA/comparator read-out |
| `tb/tb_*.sv` | self-checking testbenches, one per module; `tb_dbn_full` runs the full-size network |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
  rtl/dbn_pkg.sv tb/tb_dbn_top.sv --top-module tb_dbn_top -o sim && obj_dir/sim
```

Replace `tb_dbn_top` with any other testbench. `tb_dbn_full` builds the
full 784-500-(500+10)-2000 network with default parameters. It runs
initialization, one greedy training epoch of one image per layer, one
deterministic inference and one 50-pass inference in under a second of
simulation time.

What the testbenches check:

* `tb_cd_counter_array`: pulse masks row by row against a reference
  model, over hundreds of random passes that cross both thresholds.
* `tb_memristor_crossbar`: exact VMM currents in both directions against
  integer conductance levels, clamping, the non-linear pulse formula,
  stuck cells, the read-noise σ, cell-to-cell spread of the
  non-linearity, and both kinds of differential pair.
* `tb_neuron_sampler`: the deterministic comparator and winner-take-all,
  and firing rates at 0 and ±1 σ against the Gaussian.
* `tb_rbm_ctrl`: the strobe sequence and latency of every command.
* `tb_rbm_layer`: a whole layer with the noise off, followed exactly by
  an integer model of weights, samples, counters and pulses over 300
  steps.
* `tb_dbn_top`: a small network trained greedily and then asked to infer.
  It checks layer order, image counts, clocks per image, that layers not
  being trained stay frozen, the reconstruction-error reports, and the
  vote.

To change the device, override the parameters of `dbn_top` (`G_MAX`,
`G_MIN`, `N_P`, `N_D`, `ALPHA_P`, `ALPHA_D`, `GAMMA`, `D2D_SD`, `YIELD`,
`READ_NOISE`, `DIFF_PAIR`, `PAIR_INC`) and `TH`. Conductances are in nS.
Published fits of the device model for SiGe epiRAM, PCMO and ECRAM can be
entered this way; those devices were trained with CD_th = 128, which
needs `TH = 128`.
