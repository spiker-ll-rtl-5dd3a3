# Spiker-LL: a spiking-network accelerator that learns on chip

Spiker-LL runs a fully connected spiking neural network (SNN) of leaky
integrate-and-fire (LIF) neurons and can also train it, with no processor
involved. Training uses the STSF rule (Spiking Time Sparse Feedback). STSF is
a *three-factor* rule: a synapse changes only when three things hold in the
same timestep:

1. its input neuron spiked (`s_pre`);
2. its own neuron spiked (`s_post`);
3. a global error signal `Phi` is non-zero.

All three factors are single bits or signs. So a weight update is an add or
subtract of a precomputed constant, enabled by an AND of a few bits. No
spike traces, no multipliers, no backward pass through time and no
accumulation buffer are needed. Each neuron gets its own small weight
updater next to it. The updaters read the weights on the same path that
inference uses and write them back through the second port of the weight
memory.

This RTL implements the two-layer configuration used for MNIST: 784 inputs,
200 hidden neurons and 10 output neurons, 16-bit fixed point with 8
fractional bits, and 10 timesteps per sample. All sizes are parameters.

## 1. Network and number format

Each neuron follows the discrete-time LIF model:

```
V[n]     = beta*V[n-1] + sum_j W_j*s_j[n] - Vth*s_out[n-1]
s_out[n] = V[n] > Vth
```

- **Number format.** Weights and membrane potentials are signed 16-bit
  numbers with 8 fractional bits, so the threshold 1.0 is 256.
- **Leak without a multiplier.** `beta` is restricted to `1 - 2^-k`, so the
  leak is `V - (V >>> k)`. The evaluated values are exact: 0.875 is `k = 3`
  and 0.5 is `k = 1`. `k = 0` turns the leak off.
- **Reset.** Each layer can subtract the threshold after a spike (the
  equation above) or reset to zero.
- **Saturation.** Every addition saturates to 16 bits. This includes the
  weight updates, so a weight cannot wrap around during training.

## 2. How one timestep runs

Each layer has these parts:

- a **spike barrier**: a register holding the layer's input spike vector for
  the timestep;
- a **weight memory**: one word per input channel, each word holding that
  channel's weights for *all* neurons of the layer (200 x 16 = 3200 bits for
  layer 0);
- the neurons;
- a **local learning engine**: one weight updater per neuron;
- a **layer control unit**.

The neurons work in parallel; the input channels are streamed one per
cycle. In each cycle the control unit reads word `j` and barrier bit `j`
together. One cycle later every neuron adds its lane of the word if bit `j`
was set.

A network control unit sequences a timestep as follows:

| phase | cycles | what happens |
|---|---|---|
| accept input | 1 | `in_valid && in_ready`: load the layer-0 barrier (and `ext_sd`), start layer 0 |
| layer 0 inference | N_IN + 3 | LEAK, N_IN channels, pipeline tail, FIRE |
| layer 1 inference | 1 + N_HID + 3 | load the layer-1 barrier with the hidden spikes, then the same sequence |
| publish | 1 | `ts_valid`; `s_o(t)` is latched into the output interface |
| training pass | 1 + N_IN + 1 | only if training mode is on and `g(t) = 1` (see section 4) |
| step | 1 | advance the timestep and the gating counter |

A sample therefore takes

```
3 + T*(N_IN + N_HID + 10) + P*(N_IN + 2)  cycles
```

from `start` to `out_valid`, where P is the number of training passes. This
assumes the input never stalls. At the default size:

| case | cycles | time at 90 MHz |
|---|---|---|
| inference only | 9,943 | 0.110 ms |
| training, K = 5 (P = 2) | 11,515 | 0.128 ms |

The published figures for the same network at 90 MHz are 0.104 ms and
0.121 ms. The extra time in this design is about 6%. It comes from running
the two layers one after the other inside each timestep.

Layer 1 could instead work on timestep t while layer 0 starts t+1. This
design does not overlap them, on purpose. The hidden layer's update for
timestep t needs the output error of the *same* timestep, and with strict
ordering that error is available when the training pass starts.

A training pass streams the same channels again through the same address
counter. Both layers train at the same time, since each has its own memory.
For each channel `j`:

1. the word is read;
2. it passes through the N weight updaters;
3. it is written back to address `j` one cycle later on the memory's second
   port.

Reads of channel `j+1` and writes of channel `j` never touch the same
address, so there is no hazard. At worst, with an update every timestep, a
training pass roughly doubles a timestep's cycles.

## 3. The weight updaters

### Hidden layer (synapse j -> hidden neuron i)

```
l     = s_pre(j) AND s_post(i)                 vanilla STDP: both spiked in this timestep
err   = s_d[k(i)] XOR s_o[k(i)]                output neuron k(i) is wrong
EN    = l AND err AND g(t) AND training-pass
SUB   = ({s_d, s_o}[k(i)] == 01) XOR sign(c_i)
w_ij <= sat(w_ij -/+ |c_i|)  when EN
```

- **Feedback matrix.** Error reaches the hidden layer by Direct Feedback
  Alignment, through a fixed random feedback matrix `B`. That matrix is
  sparse to the limit: hidden neuron `i` listens to exactly one output
  neuron, `k(i)`.
- **What the hardware stores.** Per hidden neuron it keeps only `k(i)` and
  the sign and magnitude of `c_i`. The constant `c_i` folds together the
  feedback weight `B[i][k(i)]`, the `2/N_out` factor of the MSE gradient and
  the learning rate.
- **The table.** These values live in a small register file inside
  `local_learning_engine`, written through the configuration bus.
- **Reset contents.** After reset the table holds `k(i) = i mod N_out` and
  `c_i = +7`. Here 7 is the MNIST learning rate 0.026 in the 8-fractional-bit
  format.

### Output layer (synapse hidden i -> output j)

```
EN    = s_h(i) AND (s_d[j] XOR s_o[j]) AND g(t) AND training-pass
SUB   = ({s_d, s_o}[j] == 01)
w_ij <= sat(w_ij -/+ eta_out)  when EN
```

All output synapses share one magnitude, `eta_out`, which is a runtime
register.

### Sign convention

The output error `delta = s_o - s_d` is ternary. This design treats it as a
gradient and steps *downhill*:

- an output that spiked but should not have (`s_d, s_o = 0, 1`) weakens the
  synapses that helped it fire;
- an output that stayed silent but should have spiked (`1, 0`) strengthens
  them.

The update equation in the source description has no explicit minus sign.
It states only that constant factors are absorbed into the precomputed
gains, so the sign is fixed here. For the hidden layer a negative `c_i`
reverses the direction.

## 4. Temporal gating, modes and the error source

- **Temporal gating.** The time gating logic compares a timestep counter
  with a runtime value K and gives `g(t) = 1` exactly when `t mod K = 0`:
  t = 0, 5 for K = 5 and T = 10.
  - The counter restarts with every sample.
  - `K = 0` disables updates.
  - Gating thins the updates, which reduces overfitting, and removes most
    of the training passes.
- **Modes.**
  - *Inference mode* never starts a training pass.
  - *Training mode* starts one on every gated timestep.
  - Updates are applied at once, in the same 16-bit format the network uses
    for inference.
- **Error source.** The learners only need one "desired spike" bit per
  output neuron, `s_d(t)`. The `label_arbiter` supplies it in one of two
  ways:
  - *supervised*: the labelled output neuron should fire at every timestep
    and all others should stay silent;
  - *external* (`REG_TRAIN` bit 1): the vector `ext_sd` supplied with each
    timestep's input is used as is. It can come from a reward circuit, a
    heuristic or another sensor.

## 5. Top-level interface (`spiker_ll_top`)

| port | dir | meaning |
|---|---|---|
| `cfg` (`cfg_req_t`) | in | configuration write: `we`, `target`, `addr`, `index`, `data` |
| `start`, `label` | in | begin a sample (the label is captured) |
| `busy` | out | a sample is in progress |
| `in_valid`, `in_ready`, `in_spikes[N_IN]`, `ext_sd[N_OUT]` | in/out | one timestep of input spikes, with valid/ready handshake |
| `ts_valid`, `s_o`, `s_d` | out | output spikes of the timestep just computed and the target in force |
| `out_valid`, `out_class`, `out_counts[N_OUT]` | out | end of sample: spike counts and the index of the largest (lowest index on a tie) |
| `upd0`, `upd1`, `gate` | out | a weight in layer 0 / 1 changed this cycle; `g(t)` |

Spike encoding (for example Poisson rate coding of pixels) is not part of
the accelerator: `in_spikes` are already spikes.

### Configuration bus

Each write takes one cycle when `cfg.we = 1`. Write the weights only while
`busy = 0`; an assertion checks this.

| `target` | `addr` | `index` | `data` |
|---|---|---|---|
| `CFG_REG` | register (below) | - | value |
| `CFG_W0` | input channel | hidden neuron | weight `[15:0]` |
| `CFG_W1` | hidden neuron | output neuron | weight `[15:0]` |
| `CFG_FB` | - | hidden neuron i | `[31:24] = k(i)`, `[16]` = c_i negative, `[15:0] = abs(c_i)` |

| register | reset | meaning |
|---|---|---|
| `REG_GATE_K` | 5 | gating value K |
| `REG_TRAIN` | 0 | bit 0: training mode, bit 1: external feedback |
| `REG_TIMESTEPS` | 10 | timesteps per sample |
| `REG_VTH0` / `REG_VTH1` | 256 | thresholds (1.0) |
| `REG_BETA0` / `REG_BETA1` | 3 | leak shift k (beta = 0.875) |
| `REG_RSTMODE` | 0 | bit 0 / 1: layer 0 / 1 resets to zero instead of subtracting |
| `REG_ETA_OUT` | 7 | output-layer update magnitude |

The weight memories are not reset and must be loaded before use.

## 6. Files

| file | role |
|---|---|
| `rtl/spiker_pkg.sv` | sizes, neuron commands, configuration types, saturation |
| `rtl/lif_neuron.sv` | one LIF neuron: command decoder and leak/accumulate/fire datapath |
| `rtl/spike_barrier.sv` | input spike register of a layer, streamed one channel per cycle |
| `rtl/weights_bram.sv` | dual-port weight memory, one word per input channel, lane write enables |
| `rtl/update_adder.sv` | EN/SUB saturating adder shared by both updater types |
| `rtl/hidden_weight_updater.sv` | STSF updater of a hidden synapse |
| `rtl/output_weight_updater.sv` | updater of an output synapse |
| `rtl/local_learning_engine.sv` | one updater per neuron, plus the feedback table for the hidden layer |
| `rtl/layer_control_unit.sv` | per-layer FSM: inference states and mirrored training states |
| `rtl/lif_layer.sv` | one layer: barrier, memory, neurons, learning engine, control |
| `rtl/time_gating_logic.sv` | counter == K gives g(t) |
| `rtl/network_control_unit.sv` | sequences timesteps, layers and training passes |
| `rtl/output_interface.sv` | s_o(t) register, spike counters, classification |
| `rtl/label_arbiter.sv` | desired spikes from a label or an external vector |
| `rtl/config_interface.sv` | register map and routing of weight and table writes |
| `rtl/spiker_ll_top.sv` | the accelerator |
| `tb/spiker_ref_pkg.sv` | bit-accurate reference model (layers, rule, saturation) used by the layer and system tests |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_spiker_ll_top` (DIGITS size, 64-60-10) and `tb_spiker_ll_full` (MNIST size, 784-200-10) test the whole design |

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. It also has a watchdog that counts a failure if the test hangs.
Run one from the repository root like this:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_spiker_ll_full \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/spiker_pkg.sv tb/spiker_ref_pkg.sv tb/tb_spiker_ll_full.sv
./obj_dir/Vtb_spiker_ll_full
```

The full-size test builds in about 10 s and runs in a few seconds. It loads
all 158,800 weights and a random sparse feedback table, then runs these
samples:

1. one inference-only sample;
2. two supervised training samples with K = 5;
3. one sample after changing, at runtime, K (to 2), the feedback source
   (to external), the reset mode (to zero) and the hidden layer's leak
   shift (to 2);
4. one more inference sample.

At every timestep it compares `s_o` and `s_d` with the reference model. The
model applies the same rule to its own copy of the weights, so any wrong
update shows up later as a spike mismatch. The test also checks the spike
counts, the class and the cycle count of each sample.

It counts how often each mechanism occurred and fails if any count is zero:

- inference-only sample;
- training pass;
- gated-off timestep;
- hidden and output updates;
- potentiation and depression;
- external feedback;
- reset to zero;
- input stall;
- reconfiguration.

`tb_spiker_ll_top` does the same with the top built at the DIGITS size
(64-60-10, beta 0.5) and eight training samples. Both tests use random
spike trains and random initial weights; no dataset is involved, so
nothing is claimed about accuracy.

## 8. Where this RTL departs from, or goes beyond, the description

These points are not specified by the published description. They are
choices of this implementation.

- **Schedule.**
  - The layers do not overlap in time; all input channels are visited,
    including silent ones.
  - One extra cycle per phase is spent on the memory's read latency.
  - The result is about 6% more cycles than the published latencies
    (section 2).
- **Interfaces.** The valid/ready input handshake, the configuration bus,
  the register map and the host weight-load path through the memory's
  write port.
- **Sign convention** of the update (section 3).
- **Supervised target.** The labelled neuron fires at every timestep;
  the rule for turning a label into `s_d(t)` is not given.
- **Classification** by spike count, with ties going to the lowest index.
- **Feedback table reset contents** (`k(i) = i mod N_out`, `c_i = +7`). In
  practice the host writes a random sparse table.
- **Saturation** on every accumulation and update.
- **Leak factors.** `beta` is limited to `1 - 2^-k`.

The configurations that were evaluated:

| network | status |
|---|---|
| MNIST 784-200-10 | the default build |
| DIGITS 64-60-10 | runs on the default build with unused inputs and neurons left idle, but still takes the full 784/200-channel schedule; build with `N_IN = 64, N_HID = 60` for its own timing |
| Fashion-MNIST 784-300-10 | needs `N_HID = 300` |
| 8-bit MNIST variant | needs `WB = NB = 8` and a fixed-point split that is not specified; not tried |

Deeper networks are not covered: the top has exactly two layers. No
timing or area figures are claimed for this RTL.
