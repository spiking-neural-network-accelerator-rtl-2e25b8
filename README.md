# Differential-time SNN accelerator: a feed-forward LIF network in SystemVerilog

A spiking network normally runs on a clock of simulated time steps: every
step, every neuron is updated, whether a spike arrived or not. This design
instead carries each spike as a *delta time*, the number of time units since
the previous spike, and processes spikes one after another as events. The
processing time of a spike is decoupled from the simulated time it stands
for. The neuron potential only needs to know how much time has passed since
the last event, and with a decay factor of beta = 0.5 per time unit, "let
delta time units pass" is simply delta right-shifts of the potential.

The network is a chain of fully connected layers of leaky integrate-and-fire
(LIF) neurons with reset by subtraction:

    P_k = P_{k-1} * 0.5^dt  +  sum_i w_i s_i  -  s_out,    s_out = 1 if P >= 1, else 0

The default configuration is the one evaluated for MNIST: 400 input
synapses (28x28 images cut into 9x9 patches, (28-9+1)^2 = 400 encoding
neurons, computed outside this hardware) feeding layers of 800, 512, 256 and
10 neurons. No multipliers are used anywhere: weights are added, decay is a
shift.

```
 400 input spike trains          layer 0 (800)        layer 1 (512)   layer 2 (256)   layer 3 (10)
 (delta times, per synapse)    +----------------+
  ---->+-------------+  dt,idx | weights memory |  dt,idx          dt,idx          dt,idx
  ---->| spike sorter|-------->| neuron cores   |--------> ... --------> ... --------> out_* stream
  ---->|  (tree)     |         | LOPD, control, |
       +-------------+         | delay          |
                               +----------------+
```

## The spike stream

Every link between blocks carries the same kind of token, with a
valid/ready handshake:

| field   | width          | meaning |
|---------|----------------|---------|
| `delta` | 8 (`DT_W`)     | time since the previous spike *on this link* |
| `idx`   | log2 of sender | which synapse (or neuron) spiked |
| `last`  | 1              | end of one inference; carries no spike |

A spike with `delta = 0` happened at the same time as the one before it.
Inputs of the chip use the same format per synapse (without `idx`): each of
the 400 synapses streams its own train of delta times and closes it with an
end token. An inference is finished when the end token leaves the last layer;
the next inference can follow directly.

## The spike sorter: merging delta-time trains without absolute time

The 400 input trains arrive in parallel, but each layer handles one spike at
a time, in time order. Comparing the deltas of different synapses directly
is meaningless, because each is relative to its own synapse's previous
spike. Integrating them into absolute times would need wide counters that
eventually overflow. The sorter avoids both with a tree of two-input merge
nodes (`sorter_node`).

Each node holds two registers, one per input. Each register holds the time
still to go until the head spike of that input, counted from the last spike
the node sent on. Each cycle, when both are full:

1. the smaller value is sent on as the output delta (ties go to the upper input);
2. that value is subtracted from the other register, which now counts from
   the spike just sent;
3. the register that was sent is reloaded from its input. The next delta of
   that input is relative to the spike just sent, which is exactly the
   reference the node now uses.

So every node outputs a correct delta-time stream, and the root outputs all
spikes of all synapses in time order. No value ever exceeds an input delta.

The synapse index is collected on the way up. A node at tree level `l`
(level 0 next to the inputs) sets index bit `l` to 0 if it took its upper
input and to 1 if it took the lower one. After the root, the bits spell
the input number. Example with four inputs, spike trains
`s0: 3`, `s1: 1, 1`, `s2: 2`, `s3: (none)`:

| output | delta | idx | absolute time |
|--------|-------|-----|---------------|
| 1      | 1     | 1 (bits 0,1 = lower, then upper) | 1 |
| 2      | 1     | 1   | 2 |
| 3      | 0     | 2   | 2 |
| 4      | 1     | 0   | 3 |
| 5      | end   |     |   |

The tree has 2^ceil(log2 N_IN) leaves (512 for 400 inputs). Leaves without
a synapse hold an end token forever. A node that holds an end token on one
side passes the other side's spikes unchanged, and sends an end token on
once both sides hold one. Spikes of equal time leave in ascending index
order. The root's output register gives a sustained rate of one spike per
cycle and a latency of log2(leaves) + 1 cycles.

## A layer

`neuron_layer` wires five blocks together:

* `weight_memory`: one row per input synapse, holding that synapse's
  weight for every neuron of the layer (800 x 4 bits for layer 0). The
  spike's index addresses it, and the whole row is read in one cycle.
  On an FPGA this row is spread over several block RAMs side by side.
* `neuron_core` x N: a potential register, one adder, a `>>> 1` path and a
  `>= 1.0` comparator. It performs one of four operations per cycle,
  broadcast by the controller: `OP_DECAY` (halve), `OP_ADD` (add its
  weight), `OP_FIRE` (spike if P >= 1.0 and subtract 1.0 through the same
  adder), `OP_NOP`.
* `layer_controller`: the schedule, see below.
* `lopd`: a leading-one position detector over the layer's spike vector.
* `delta_delay`: gives the output spikes their delta time.

### Schedule of one input spike

All neurons of a layer decay together, so the decay is generated once per
layer:

```
accept spike (delta d, idx)      -> weight row idx is read (ready next cycle)
[FIRE]   if d > 0 (or end token) and spikes of an earlier time were added:
         threshold that timestep first; the LOPD takes the spike vector
DECAY    d cycles, one halving each
ADD      1 cycle; the next spike is accepted in this cycle
```

A spike thus costs `d + 1` cycles, plus one cycle when it opens a new
timestep. Spikes with `delta = 0` are added at one per cycle. Thresholding
happens only once all spikes of one time have been added, as the neuron
equation requires. The end token fires the last timestep, waits until the
LOPD has sent every spike and the end token on, then clears all potentials
for the next inference.

The decay really takes `d` cycles, one shift per time unit. A delta of 255
therefore costs 255 cycles, even though a 16-bit potential reaches its
floor after 16 halvings. Stopping the count at the potential width would be
a simple speed-up, but it is not built here.

### Serializing the output: LOPD and delay

The spike vector captured at a `FIRE` is serialized by finding the leading
(highest) one, sending its position, and clearing it with the detector's
one-hot output, at one spike per cycle. No sorting is needed: all these
spikes share one time. The first spike of the vector carries that time's
delta; the rest carry 0. While the LOPD is still busy, the next `FIRE` of
the layer waits. This stall is what couples the layers' speeds.

The delta to send is the time since the last timestep *that produced
output spikes*, not since the last input spike. `delta_delay` accumulates
the input deltas and restarts from zero only when a timestep actually
fired. Timesteps without output spikes hand their time on. The accumulator
saturates at 255. That loses nothing: after 255 halvings, any potential of
the next layer has reached its floor (0, or -1 LSB if it was negative),
the same result an exact delta would give.

## Number formats

| quantity  | format | note |
|-----------|--------|------|
| weight    | signed 4 bits, 2 fraction bits (-2.0 .. 1.75) | `W_W`, `W_FRAC` in `snn_pkg` |
| potential | signed 16 bits, 8 fraction bits, saturating | `POT_W`, `POT_FRAC` |
| threshold | 1.0 = 256 | fixed, beta = 0.5 |
| delta     | unsigned 8 bits | `DT_W` |

Weights are aligned to the potential by a fixed left shift of
`POT_FRAC - W_FRAC`. Decay is an arithmetic shift (rounding toward minus
infinity), so negative potentials decay as well. The 4-bit weight was
chosen because the published resource count (91 block RAMs, about 3.35 Mbit,
for 863,232 weights) implies fewer than 4 bits per weight. The exact width
is not published.

## Top level: `snn_accelerator`

| port | width | |
|------|-------|---|
| `in_valid`, `in_ready`, `in_last` | `N_IN` | one stream per input synapse |
| `in_delta` | `N_IN x 8` | |
| `out_valid`, `out_ready`, `out_delta`, `out_idx`, `out_last` | 1, 1, 8, 4, 1 | spikes of the 10 output neurons |
| `wr_en`, `wr_layer`, `wr_row`, `wr_group`, `wr_data` | 1, 2, 10, 7, 32 | weight load: 8 weights of neurons `8*wr_group ..` for input `wr_row` of layer `wr_layer` |
| `ev_stall`, `ev_fire`, `ev_fire_spiked`, `ev_sat` | 4 each | per-layer event strobes (LOPD stall, threshold step, threshold step with spikes, delta saturated) |

Parameters `N_IN, N_L0..N_L3` (defaults 400, 800, 512, 256, 10) set the
network. Loading all weights takes 108,096 writes. Turning the output spikes
into a class (for example, the neuron that spikes most) is left to the
host. Reset (`rst_n`, active low, synchronous) clears all control state.
The weight memories keep their contents.

## Where this RTL follows the published design and where it fills gaps

Taken from the description:

* the overall structure: one shared spike sorter, then per layer a weights
  memory with one-cycle wide reads, neuron cores, LOPD, layer controller
  and delay;
* the sorter's compare / forward-minimum / subtract-from-both scheme, with
  the index formed from the comparison bits (0 = upper input);
* the neuron core's one register, one adder, shift and comparator, and the
  layer-wide decay of one shift per cycle of delta time;
* thresholding once per timestep, after all spikes of that time;
* the LOPD run repeatedly with the found bit cleared;
* the network sizes and theta = 1, beta = 0.5.

Choices of this design, where the description gives no detail:

* all widths and fixed-point formats (table above), saturation of the potential;
* valid/ready handshakes, the end-of-inference token, and clearing the
  potentials between inferences;
* generalising the 4-input sorter drawing to a padded binary tree, and the
  tie rule;
* the reset by subtraction through the shared adder (`-theta` as the addend);
* the delay block as a saturating accumulator, so timesteps without output
  spikes keep the time correct (a plain delay register would lose it);
* stalling `FIRE` while the LOPD is busy, leading one = highest index;
* the weight load port.

Not included: the patch-encoding layer (the first LIF layer that reads 9x9
pixel patches pixel by pixel). In the evaluated configuration it runs
offline, and the inputs here are its spike trains. The published clock
(300 MHz), resource counts and throughput (3400 images/s, about 88,000
cycles per image) are FPGA results and are not checked here. With random
stimuli on all 400 inputs (up to 4 spikes per synapse), one inference
through the default-size design took about 29,500 cycles. Two synthetic
digits, encoded by a model of the patch encoder and run with synthetic
weights, took 24,067 and 18,239 cycles. Those figures depend on the weights
and on how many spikes each layer produces, so they say nothing about
accuracy.

Sizes: the default configuration holds the 400-800-512-256-10 network
exactly. Patch sizes 5x5 to 8x8 need 576, 529, 484 or 441 inputs; set
`N_IN` accordingly.

## Verification

Each block has a self-checking testbench in `tb/`, comparing against models
written from the network's definition (`tb_snn_ref_pkg`). The sorter model
forms absolute times and sorts them. The layer model applies the LIF
equation token by token.

| testbench | checks |
|-----------|--------|
| `tb_neuron_core` | random operation sequences against the equation, including saturation and clear |
| `tb_spike_sorter` | 13 inputs, random trains with ties and empty trains, random gaps and back-pressure, three inferences; one spike per cycle |
| `tb_weight_memory` | 8-lane loading with a partial last group, wide reads, hold |
| `tb_lopd` | random vectors, order, single delta per vector, one spike per cycle, end token |
| `tb_delta_delay` | carried time against absolute times, saturation |
| `tb_layer_controller` | exact operation schedule, `d + 1` (+1) cycles per spike, read addresses, stalls |
| `tb_neuron_layer` | 20 x 24 layer against the layer model, five inferences |
| `tb_snn_accelerator` | 12-input 24-16-12-4 network end to end, six inferences; counts that equal-time inputs, decay, firing and quiet timesteps, LOPD stalls, delta saturation, back-pressure and inference ends all occur |
| `tb_snn_full` | default size: all 863,232 weights loaded, two inferences against the reference (about 25 s) |
| `tb_mnist_workload` | default size on MNIST-shaped input: two synthetic 28x28 digits through a behavioural model of the 9x9 patch encoder (400 LIF neurons, ternary weights, one pixel per time step), then the accelerator against the reference; prints cycles per image |

To run one with plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl rtl/snn_pkg.sv tb/tb_snn_ref_pkg.sv \
          tb/tb_snn_accelerator.sv --top-module tb_snn_accelerator -Mdir obj
./obj/Vtb_snn_accelerator
```

Each prints `TB_RESULT checks=N failures=M`. The sizes of the reduced
tests are `localparam`s at the top of each testbench.

## Files

`rtl/snn_pkg.sv` holds the shared widths and the operation enum. The rest of `rtl/` has one module per file:
`sorter_node`, `spike_sorter`, `weight_memory`, `neuron_core`,
`layer_controller`, `lopd`, `delta_delay`, `neuron_layer`,
`snn_accelerator` (top). `tb/` holds the testbenches and the reference
package.
