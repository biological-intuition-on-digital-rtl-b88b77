# A Poisson-encoded spiking layer for static image classification

This is synthesizable SystemVerilog for a small spiking neural network (SNN)
accelerator. It classifies 28 x 28 grey-scale digit images with one fully
connected layer of ten leaky integrate-and-fire (LIF) neurons, one neuron per
digit class. Nothing in it multiplies. An on-chip xorshift random source turns
each pixel into a stream of 0/1 spikes over time. A neuron adds a 9-bit weight
when its input spikes, leaks by a right shift, and fires when its membrane
potential reaches a threshold. Once a neuron has fired, the controller gates it
off for the rest of the inference ("active pruning"). The first neuron to fire
gives the predicted class.

The architecture follows a published description of such a core: the LIF
equation, the neuron datapath, the Poisson encoder, the controller with
per-neuron enables and spike feedback, and the main sizes. Much of the timing
and control detail was not specified there and was chosen for this
implementation. Those choices are flagged below and in the header comment of
each file.

## The computation

For neuron *j* and timestep *t*, with resting potential 0 and decay factor
beta = 2^-n:

    V_j[t] = V_j[t-1] - (V_j[t-1] >>> n) + sum_i W_ij * S_i[t]
    if V_j[t] >= V_th:  spike_j[t] = 1,  V_j[t] = 0

Here `S_i[t] = (R_i,t < I_i)`, where `I_i` is the 8-bit intensity of pixel *i*
and `R_i,t` is a fresh 8-bit pseudo-random number. Pixel *i* therefore spikes
with probability `I_i / 256` in every timestep. The same static image is
encoded again in each timestep, so brightness becomes spike density over time.

| quantity | value | origin |
|---|---|---|
| inputs (pixels) | 784 (28 x 28), 8 bit | described |
| neurons | 10 | described |
| weights | 9-bit signed, 784 x 10 x 9 = 70,560 bits | described (see "Departures") |
| threshold V_th | 128 | described |
| resting / reset potential | 0 | described |
| decay | arithmetic right shift by n, default n = 3 | shift described, n chosen |
| membrane word | 16-bit signed, saturating | chosen |
| random source | xorshift32 (13, 17, 5), low 8 bits | 32-bit xorshift described, shifts chosen |
| inference window | `num_steps`, 20 in the tests | 20 described |

## Blocks

```
                 +-------------+  pixel  +-----------------+ spike (broadcast)
 host ---------> | image_buffer|-------->| poisson_encoder |----------+
                 +-------------+         |  xorshift_prng  |          |
                        ^ pix_addr       +-----------------+          v
 +------------------+   |  enc_enable                        +-----------------+
 | layer_controller |---+----------------------------------->|  lif_neuron x10 |
 |  FSM, pruning,   |-- neuron_en[9:0], neuron_op ---------->|  (parallel)     |
 |  decision        |                     +------------+ row |                 |
 +------------------+   pix_addr (+1 cy)->| weight_mem |---->| weight[j]       |
        ^   fired / spike_out            +------------+      +-----------------+
        |                                                          | result[9:0]
        +------------------ spike_register <-----------------------+
                                  |
                                  +--> spike_out, fired (top outputs)
```

| file | role |
|---|---|
| `rtl/snn_pkg.sv` | default sizes and the neuron command type `neuron_op_e` |
| `rtl/xorshift_prng.sv` | 32-bit xorshift generator |
| `rtl/poisson_encoder.sv` | PRNG, comparator `R < a`, output register |
| `rtl/lif_neuron.sv` | one LIF neuron core |
| `rtl/weight_mem.sv` | weight memory, one row (ten weights) per pixel |
| `rtl/image_buffer.sv` | the image being classified |
| `rtl/spike_register.sv` | per-timestep spike vector and sticky "has fired" vector |
| `rtl/layer_controller.sv` | timestep sequencing, enables, pruning, class decision |
| `rtl/snn_core.sv` | top level |

## Anatomy of a timestep

The hardest part to follow is how one timestep of the equation maps onto
clock cycles. There is one shared encoder. All ten neurons run in parallel and
see the same pixel's spike in the same cycle, each with its own weight. The
controller steps through these phases:

| phase | cycles | what happens |
|---|---|---|
| CLEAR | 1 (once per inference) | all membranes reset to 0, spike register cleared |
| LEAK | 1 | every enabled neuron: `V <= V - (V >>> n)` |
| INT | 784 | pixel p = 0..783 read and encoded; spike and weight row reach the neurons |
| DRAIN | 3 | encoder and weight pipeline empty |
| FIRE | 1 | every enabled neuron compares V with its threshold |
| WAIT | 1 | comparator result lands in the neuron's comp-reg, i.e. the output spike |
| CAPTURE | 1 | the spike register stores the ten spikes; fired neurons' membranes reset |
| SAMPLE | 1 | the controller reads the spikes back, decides, and starts the next timestep |

A timestep is therefore 784 + 8 = 792 cycles. An inference of S timesteps
takes `S * 792 + 2` cycles from the `start` cycle to the `done` pulse. The
leak comes first, so it acts on V[t-1] exactly as in the equation; it has the
same effect as leaking at the end of the previous timestep.

The pixels can also be cut into several integration windows of `LEAK_WINDOW`
pixels, each preceded by a leak, for example one window per image row
(`LEAK_WINDOW = 28`). After each window the controller repeats DRAIN and
LEAK, so that the leak only reaches the neurons after the window's last spike
has been added. Each extra window adds four cycles: 784 + 28 x 4 + 4 = 900
cycles per timestep with row windows.

Pixel *p*, issued by the controller in cycle k, moves down this pipeline:

| cycle | event |
|---|---|
| k | image buffer read, PRNG steps (`enc_enable`) |
| k+1 | pixel and random value meet in the comparator; weight row read with the address delayed one cycle |
| k+2 | `spike_valid`, spike and weight row at the neurons; the neuron command becomes OP_INT |
| end of k+2 | neuron input register (the diagram's weight register) takes the values |
| end of k+3 | accumulator updated |

The controller's own commands (CLEAR, LEAK, FIRE) never coincide with a
`spike_valid` cycle, and an assertion in `snn_core` checks this.

## The neuron

`lif_neuron` is built around the datapath of the described neuron core:

* an **accumulator** register holding V;
* an **adder** whose operands are (spike AND weight-register) and the output
  of a **multiplexer**;
* the multiplexer chooses between the stored potential (integration) and the
  decayed potential `V - (V >>> decay_reg)` (leak);
* a **comparator** `V >= threshold_reg` whose result is registered in
  **comp-reg**, the neuron's output spike;
* comp-reg ORed with the clear command resets the accumulator to 0 in the
  cycle after the fire.

The described datapath also has separate "store" and "multiply" registers
between the accumulator and the adder. Here they are folded into the
accumulator so that a spike can be integrated every cycle. Every addition
saturates at the 16-bit limits. The threshold and decay registers reset to 128
and 3 and can be rewritten through `cfg_we`.

Each neuron takes a command from `snn_pkg::neuron_op_e` (NOP, CLEAR, LEAK,
INT, FIRE). Together with `en`, it is captured in the input register and
executed in the next cycle. This is this design's form of the neuron's
fetch-decode-execute cycle. With `en` low the neuron ignores LEAK, INT and
FIRE. CLEAR and the post-fire reset act regardless of `en`.

## Active pruning and the decision

`spike_register` keeps two vectors: `spike_out`, the spikes of the latest
timestep, and `fired`, the OR of all spikes since the inference began. `fired`
is fed back to the controller, which drives `neuron_en = busy & ~fired`. A
neuron that has fired therefore never leaks, integrates or fires again in that
inference. That saves switching in its adder and accumulator, and each neuron
fires at most once per inference.

The predicted class is the first neuron to fire. If several fire in the same
timestep, the lowest index wins. `decided_step` records the timestep of the
decision. With `early_stop` high, the inference ends at the end of that
timestep, so the layer can go idle early. Otherwise it runs all `num_steps`
timesteps. If no neuron fires, `class_valid` is low at `done`.

## Using the core

1. Reset (`rst_n` low, asynchronous).
2. Write the 784 pixels: `img_we`, `img_addr`, `img_data`, one per cycle.
3. Write the 7,840 weights: `w_we`, `w_addr` (pixel), `w_neuron`, `w_data`
   (signed 9-bit), one per cycle. Weights stay loaded across images.
4. Optionally set the threshold and decay shift of all neurons (`cfg_we`) and
   reseed the PRNG (`seed_load`, `seed`; a zero seed selects the default).
5. Set `num_steps` and `early_stop`, then pulse `start` for one cycle while
   `busy` is low.
6. Wait for the one-cycle `done` pulse, then read `class_valid`, `class_id` and
   `decided_step`. `v_mem`, `spike_out` and `fired` can be watched at any time.

The PRNG is not reseeded between inferences. Its sequence simply continues,
with one step per pixel per timestep.

At 40 MHz, 10 timesteps take 7,922 cycles (about 198 us) and 20 timesteps take
15,842 cycles (about 396 us).

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_xorshift_prng` | every output against a software xorshift32, reseed, zero seed, mean of the outputs |
| `tb_poisson_encoder` | every spike against `R < a` from a model PRNG, two-cycle latency, spike rate at intensities 0/64/128/200/255 |
| `tb_lif_neuron` | cycle-by-cycle reference model over 20,000 random commands, plus a worked example and both saturation limits |
| `tb_weight_mem`, `tb_image_buffer` | full-size write and read-back, read latency, hold |
| `tb_spike_register` | random capture and clear traffic against a model |
| `tb_layer_controller` | phase counts, pixel order, timestep length, latency, pruning, tie rule, early stop, no-decision case, windowed leak (16-input layer) |
| `tb_snn_core` | whole design at its default size against a transaction-level model, see below |
| `tb_snn_core_rowleak` | the same with a leak before every image row (`LEAK_WINDOW = 28`) |
| `tb_snn_core_robustness` | the same model check on images that are rotated 15 degrees, shifted 6 pixels, noisy or partly occluded |

`tb_snn_core` runs the top with every parameter at its default. It uses a
synthetic ten-class task, not MNIST, because no trained weights are available.
The image is cut into 4 x 4 pixel blocks and every block belongs to one class.
A class-c image is bright in class c's blocks and dim elsewhere. Neuron j has
weight +2 on its own blocks and -1 elsewhere. For every timestep, the bench
compares the spike vector and all ten membrane potentials with an independent
model of the equations above. At the end it compares the class, the decision
step and the exact cycle count. It runs ten 20-step inferences (all ten are
classified correctly), one with early stop, one with a different threshold
and decay set through the configuration port, and a black image on which
nothing fires. It also counts leaks, integrations, fires, pruned-neuron
cycles, early stops, configuration writes and undecided inferences, and it
fails if any of them never happened.

`tb_snn_core_robustness` prints an accuracy for each kind of disturbance. With
the synthetic templates it gets 10/10 undisturbed, 10/10 occluded, 9/10
noisy, and 0/10 rotated or shifted. The templates are made of 4 x 4 blocks, so
moving pixels by a few positions lands them on other classes' blocks. These
numbers describe the synthetic task, not the core. Only the model match, and
the undisturbed accuracy, are checked.

To run a testbench with Verilator 5 from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_snn_core \
    -y rtl -y tb +libext+.sv -Irtl rtl/snn_pkg.sv tb/tb_snn_core.sv
./obj_dir/Vtb_snn_core
```

Replace `tb_snn_core` with any other testbench name. The full-size
end-to-end run takes a few seconds.

## Departures and open points

* **Weight width.** The description gives both 8-bit weights (experimental
  setup) and 9-bit weights (memory footprint, and a 9-bit input bus `d[8:0]`
  in the array diagram). This design uses 9 bits, signed. Set `WEIGHT_W` to
  change it.
* **Parallel or sequential neurons.** The description calls the neuron cores
  parallel instances, but its array diagram speaks of enables "for sequential
  neuron processing". Here all ten neurons work in parallel, and the enables
  only carry pruning.
* **When the leak happens.** The LIF equation leaks once per timestep. The
  text also describes the leak as triggered at the end of an integration
  window, "for example one image row". Both are built. `LEAK_WINDOW` (pixels
  per window) defaults to 784, one leak per timestep. `LEAK_WINDOW = 28`
  leaks before every image row. That mode needs a smaller beta (a larger
  decay shift, 6 in its testbench), because the leak then acts 28 times per
  timestep.
* **Repeated firing.** The published membrane trace shows the winning neuron
  firing in almost every timestep. With active pruning a neuron fires at most
  once per inference, so that trace must come from a model without pruning.
  This design prunes.
* **When the comparator fires.** The comparator is said to monitor the
  potential continuously, but the published membrane trace shows at most one
  fire per timestep with potentials well above threshold. Here the comparator
  output is sampled once per timestep (FIRE phase). The reset follows one
  cycle after the fire, through comp-reg, as the datapath diagram shows.
* **Latency.** The description quotes about 100 us for 10 timesteps at
  40 MHz (400 cycles per timestep), and elsewhere under 1 us. This design,
  with one shared encoder and one pixel per cycle, needs 792 cycles per
  timestep, i.e. about 198 us for 10 timesteps. Reaching 100 us would mean
  encoding two pixels per cycle; the description does not say how.
* **Accuracy.** The roughly 89 % MNIST accuracy depends on trained weights,
  which are not available, so it is not reproduced. The testbenches check the
  arithmetic against a model, not the accuracy.
* **Own choices.** These are all this design's: the 16-bit saturating
  membrane, decay shift 3, xorshift shifts (13, 17, 5) and seed, the image
  buffer and host write ports, the phase sequence and its cycle counts, the
  first-to-fire decision with lowest-index ties, early stop, and the
  configuration registers.

## Changing the design

All sizes are parameters of `snn_core`. Their defaults live in `snn_pkg`:
`N_INPUTS`, `N_NEURONS`, `PIXEL_W`, `WEIGHT_W`, `V_W`, `SHIFT_W`, `V_TH`,
`DECAY_SHIFT`, `STEP_W`, `SEED`, `LEAK_WINDOW`. The timestep length follows
`N_INPUTS` and `LEAK_WINDOW` automatically. `layer_controller` has a `DRAIN_CYCLES` parameter. It must
cover the three-cycle encoder-to-neuron pipeline; change it only if you add
pipeline stages there.
