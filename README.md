# A streaming gradient-descent trainer for small neural networks

This RTL trains a fully connected neural network in hardware. It works
directly on a continuous stream of samples, such as the readout of a
particle detector, and does not first filter, store and train offline.

Every step of mini-batch gradient descent has its own pipelined block:
- forward propagation;
- the cost derivative;
- back-propagation of the error;
- gradient accumulation;
- the parameter update.

All these blocks work at the same time, each on a different sample. A new
sample enters every `max(n_inputs, N_NEURONS) + 2` clock cycles. Only the
parameter update pauses the input, and input that arrives during the update
is buffered. The learned weights and biases can be read out as a stream of
configuration commands.

The default build holds 4 layers of 64 neurons each. A network smaller than
that (fewer inputs, fewer neurons per layer) is set at run time through
registers.

## Numbers and streams

**Number format.** All values are signed fixed point Q16.16 (`data_t`, 32 bits).
- A product is `(a*b) >>> 16`, truncated.
- Sums wrap on overflow.

**Streams.** Blocks talk through unidirectional, registered streams:

| stream | type | content |
|---|---|---|
| ACTIVATION | `stream_t` {valid, last, idx, data} | α_i of one layer, i = 0..n-1, then a constant 1 with `last` (index n) |
| STIMULUS | per-neuron slot | the weighted sum χ_j of each neuron, shifted out of a layer one element per cycle |
| PIPE | `pipe_t` {valid, idx, act, deriv} | α_j and σ'(χ_j) of one layer, for the backward network |
| ERROR | `stream_t` | ε_k of one layer, with `last` on the final element |
| RESULT | per-neuron slot `res_t` | learn: a neuron's ε_j. Update: {parameter value, gradient} |
| CONFIGURATION | `cfg_cmd_t` {valid, resp, param, layer, neuron, index, value} | commands, triggers and read-out answers |

The constant 1 at the end of every activation stream is what a neuron multiplies
its bias with. The bias therefore lives in the same memory as the weights, at
address `N_NEURONS`.

## The blocks and how data flows

```
 DATA, TRUTH -> feeder --ACTIVATION--> forward layer 1 -> ... -> forward layer L -> cost -> backward layer L -> ... -> backward layer 0
                  |  \                     | PIPE                    | PIPE         ^             ^ PIPE                ^ PIPE
                  |   +-- PIPE (inputs) ---+------ delay-2 per layer +--------------+-------------+---------------------+
                  +------ TRUTH -- delay-1 ---------------------------------------- +
 CONFIGURATION -> configurator ==> forward layers 1..L ==> LEARNED  and  ==> backward layers L..0
 triggers      -> control  (config / learn / update / read-out)
 backward layers' update modules --RE-CONFIGURATION--> configurator
```

| file | block |
|---|---|
| `lbf_pkg` | types, sizes, latencies, register map, the fixed-point multiply |
| `lbf_feeder` | input FIFOs; releases complete samples at the sample period |
| `lbf_fwd_neuron`, `lbf_fwd_layer`, `lbf_activation`, `lbf_fwd_net` | forward network |
| `lbf_cost` | sum-of-squares cost derivative α − τ |
| `lbf_delay_line` | programmable delay; delay-1 for truth, one delay-2 per PIPE stream |
| `lbf_bck_neuron`, `lbf_bck_layer`, `lbf_update`, `lbf_bck_net` | backward network and parameter update |
| `lbf_configurator` | register map, command broadcast, queue for re-configuration commands |
| `lbf_control` | operating state machine and update/read-out sequencing |
| `lbf_top` | everything wired together |

### Forward layer

A forward layer is a chain of `N_NEURONS` identical neurons. Three things pass
through every neuron with one register each:
- the ACTIVATION stream;
- the CONFIGURATION stream;
- a STIMULUS slot.

**Computing χ_j.** Each neuron multiplies every passing activation element by
its weight from memory-1 and accumulates (MAA-1). After the trailing 1 it loads
χ_j into its STIMULUS slot. The neuron for j = 0 is placed last in the chain,
next to the activation module, so it finishes last.

**Shifting out.** When neuron 0 has loaded, the layer's shift controller shifts
the STIMULUS chain for n^l cycles. The elements χ_0 … χ_{n-1} then leave in
order.

**Overlapping samples.** Slots carry a parity bit, and only slots of the
parity being shifted move. A neuron can therefore load the next sample's
result while an older one is still shifting past it.

**Inactive neurons.** Neurons with j ≥ n^l are switched off by the neuron
count register, and their slots stay empty. They sit at the start of the
chain, so they only add latency.

**Activation module.** It computes linear, ReLU and PaReLU, with their
derivatives, in parallel.
- A register selects the function per layer. The PaReLU negative slope is a
  register as well.
- The latency is 3 cycles.
- It emits the next layer's ACTIVATION stream, with the trailing 1 added, and
  the layer's PIPE stream.

### Cost

The cost is the sum of squares. The ERROR stream into the first backward layer
is α_j − τ_j; the factor 2 is part of the learning rate. The latency is 3
cycles.

Truth values reach the cost through delay-1. They are written into a capture
register file. Element 0 of a prediction copies the captured set into the
active set.

### Backward neuron and layer

Backward layer l holds neuron j of layer l. For every element ε_k of the
incoming ERROR stream it does two multiply-accumulates:

- **MAA-2:** `Σ_k w^{l+1}_{kj} ε_k`. Memory-2 holds the weights leaving
  neuron j, a permuted copy of the next forward layer's weights, which is kept
  current by the same WEIGHT commands. The first backward layer (l = L) uses
  identity weights instead. After the last element the sum is multiplied by
  σ'(χ_j), which gives ε^l_j.
- **MAA-3:** `grad_w[k] += α^l_j ε_k`. This is the gradient of w^{l+1}_{kj}.
  The first backward layer has none.

ε^l_j is also added to `grad_b`. Backward layer 0 only accumulates the weight
gradients of layer 1.

**latch-A.** α^l_j and σ'(χ_j) reach the neuron on the delayed PIPE stream.
The neuron captures its own element in a capture register. At ERROR element 0
of the next sample, the capture moves into latch-A; the first backward layer
moves at the last element instead.
- A second capture before the move, or a move with nothing captured, sets
  `sync_err_o`. This is the check that the delays are programmed right.

**Learn state.** The ε^l_j are loaded into the RESULT slots and shifted out like
the STIMULUS pipe. The update module at the end of the layer turns them into
the ERROR stream of the next backward layer.

**Update state.** A trigger `UPD_W(layer l, index k)` makes every active neuron
of the layer load `{w^{l+1}_{kj}, grad_w[k]}` into its slot and clear that
gradient. `UPD_B(l)` does the same with `{b^l_j, grad_b}`. The update module
computes `v − s·g`. It encodes the new value as a WEIGHT or BIAS command,
which goes back to the configurator and is broadcast to the forward neurons and
to memory-2 alike.

The step size s is a register. It includes the 1/n_batch of averaging over the
batch.

### Operating states

```
config --start_learn--> learn --n_batch samples issued--> update --done, no end_learn--> learn
config --start_readout--> read-out --all answers out--> config
update --done, end_learn seen during the batch--> config
```

**Update state.** It runs in this order:
1. Wait until backward layer 0 has absorbed all n_batch samples.
2. Issue the triggers, one layer at a time from L down to 0. Each layer gets
   the UPD_W triggers for k < n^{l+1}, spaced n^l + 1 cycles apart, then one
   UPD_B.
3. Wait a fixed time for the last results and for the re-configuration queue
   to drain.
4. Wait until the new parameters have crossed the configuration chain.

The input FIFOs keep filling during the update.

**Read-out state.** Control issues a READ_W or READ_B for every active
parameter. The forward neuron holding it replaces the request with a
WEIGHT/BIAS command that carries its value and has `resp = 1`. These answers
leave on `learned_o` in the same format the user configures with, so a
read-out can be replayed as a configuration.

## Configuring the network

Every command goes in on `cfg_i` while the state is config. A command with
`layer = REG_LAYER` (all ones) writes a network register; `index` selects it:

| index | register | reset value |
|---|---|---|
| 0 | n_inputs (values per sample) | 0 |
| 1 | n_truth (truth values per sample) | 0 |
| 2 | n_batch | 1 |
| 3 | step size s (Q16.16) | 0 |
| 4 | delay-1 (truth) | 1 |
| 16 + l | n^l, active neurons of layer l = 1..L | N_NEURONS |
| 32 + l | activation of layer l: 0 linear, 1 ReLU, 2 PaReLU | linear |
| 48 + l | PaReLU slope of layer l | 0 |
| 64 + l | delay-2 of backward layer l = 0..L | 1 |

Weights are sent as `WEIGHT` with (layer l, neuron j, index k) for w^l_{jk}.
Biases are sent as `BIAS` with (layer l, neuron j).

### Programming the delays

This is the part a user must get right. Everything here is derived from this
RTL's latencies. Let:
- S be the cycle at which input element 0 of a sample leaves the feeder;
- p = max(n_inputs, N_NEURONS) + 2, the sample period;
- n^0 = n_inputs.

**Forward output.** Layer l's output element 0, and its PIPE element 0, appear at

    S_l = S + Σ_{i=1..l} (n^{i-1} + N_NEURONS + 5)

**Error timing.**
- ERROR element 0 enters the first backward layer at `E_L = S_L + 3`.
- Each backward layer adds `n_err + N_NEURONS + 2` cycles, where n_err is the
  length of its incoming error stream (n^{l+1}, or n^L for layer L). So
  `E_{l-1} = E_l + n_err(l) + N_NEURONS + 2`.

**delay-2 of backward layer l.** Let P_l = S_l + delay be the cycle at which
PIPE element 0 arrives. P_l must lie in this window:
- `[E_l − p, E_l − n^l]` for l < L;
- `[E_L − p + n^L − 1, E_L − 1]` for l = L.

Pick the middle, at least 1. A wrong value shows as `sync_err_o`.

**delay-1 (truth).** The truth of a sample must arrive completely between two
prediction starts:

    delay-1 ∈ [S_L − S − p, S_L − S − n_truth]

Each window is `p − n` cycles wide. With all 64 neurons of a layer active, it is
only 2 cycles wide, so the formulas must be used exactly.

## Throughput

**Learn state.** The absorption rate is one sample every p cycles.

**Update phase.** With the sequential layer order used here, the update takes
about this many cycles, plus the fixed waits of about (L+2)(N+1):

    Σ_l (n^{l+1} + 1)(n^l + 1)

For the 6-64-64-16-7 network this is about 6000 cycles per batch, against
64 × 66 cycles of absorption for a batch of 64.

**FIFO size.** The input FIFOs (1024 words each) must hold the input of one
update phase.

## Where this design departs from the architecture it implements

- **Number format.** Q16.16 fixed point instead of IEEE binary32. Results are
  bit exact against a fixed-point reference, not against a floating-point
  one.
- **Layer count.** All `N_LAYERS` layers are always active. There is no
  active-layer register, so a shallower network is not possible at run time.
- **Update order.** Layers are updated one after the other, not concurrently.
  This costs update time, but only one re-configuration stream is busy at a
  time; the configurator still queues them.
- **Cost function.** Only the sum-of-squares cost is built.
- **Delays.** The delays are plain registers computed by the user (formulas
  above). An alignment checker flags mistakes.
- **latch-A.** Its capture/move split and the separate move point of the first
  backward layer are this design's own.
- **Update sign.** The update is `v − s·g`.
- **Latencies.**
  - The sample period is the same, `max(n_inputs, N) + 2`.
  - A forward layer here takes `N + n^{l-1} + 5` cycles, not `+ 6`.
  - A backward layer takes `N + n_err + 2`, not `+ 4`.
  - The per-stage latencies (3, 3, 3, 3, 2, 1, 3, 2) follow the architecture's
    table. The layer totals differ because of where this design places the
    registers between the stages.
  - Delays must be computed with the formulas of this document.
- **Naming.** Truth goes through delay-1 and PIPE through delay-2, one delay
  line per backward layer.

## Verification

Every testbench is self-checking. Each ends with a `TB_RESULT checks=… failures=…`
line.

- **`tb_lbf_top`** is the end-to-end test at the default size (4 × 64).
  - It configures a 6-64-64-16-7 network with PaReLU and one-hot truth, batch
    64, with the delays from the formulas above.
  - It streams random samples at a steady rate and trains two batches, then
    reads all parameters out. It compares every weight and bias bit for bit
    with an independent fixed-point model of mini-batch gradient descent. It
    also compares every prediction of the first batch.
  - It counts each mechanism and fails if one never happens:
    - register writes;
    - learn→update, update→learn and update→config;
    - update triggers and re-configuration commands;
    - input buffered during update;
    - samples released at the minimum period (checked never to be shorter);
    - the PaReLU negative branch;
    - read-out answers;
    - a FIFO overflow under a flood.
- **`tb_lbf_fwd_neuron`** checks one forward neuron on its own: chi = Σ w·α + b
  for random input counts, one STIMULUS load 2 cycles after the trailing 1,
  the 1-cycle ACTIVATION/CONFIGURATION pass-through, weight and bias
  read-out, and that a neuron beyond n^l never loads.
- The other neuron, layer and network modules are verified through
  `tb_lbf_top`. A wrong weight, gradient,
  alignment or update shows up there as thousands of mismatching parameters.
- **`tb_lbf_activation`** checks all three functions, the derivatives, the
  trailing 1, the 3-cycle latency and the configuration pass-through, cycle
  by cycle.
- **`tb_lbf_update`** checks the update module.
  - The error pass-through: 1 cycle, index and `last`.
  - `v − s·g` and its encoding as a WEIGHT or BIAS command: 3 cycles.
- **`tb_lbf_cost`** checks α − τ per element, the 3-cycle latency, `last`, and
  that the trailing 1 is dropped. It uses random output counts.
- **`tb_lbf_delay_line`** checks `out(t) = in(t−d)` for delays from 1 to the
  full depth.
- **`tb_lbf_feeder`** checks:
  - that the FIFO holds input during update;
  - release at exactly the minimum period;
  - the sample format (inputs, trailing 1, PIPE, truth);
  - that input in config is ignored;
  - overflow.
- **`tb_lbf_configurator`** checks:
  - every register of the map;
  - broadcast after exactly 2 cycles;
  - priority of control commands over queued re-configuration commands, and
    their order;
  - queue overflow.
- **`tb_lbf_control`** checks the state sequence on a small network, batch 4.
  - For each layer: the number, order and spacing of update triggers.
  - The number of read-out requests.

To simulate with plain verilator (the package first):

    verilator --binary --timing --assert -Irtl rtl/lbf_pkg.sv tb/tb_lbf_top.sv --top-module tb_lbf_top
    ./obj_dir/Vtb_lbf_top

The end-to-end test takes about a minute to compile and a second to run.

## Changing the size

`N_LAYERS`, `N_NEURONS`, `DATA_W` and `FRAC_W` are in `lbf_pkg`. The index
width grows with N_NEURONS, and the register map needs at least 7 bits.

The FIFO depth, the delay-line depth and the re-configuration queue depth are
parameters of `lbf_top`. The delay-line depth must cover the largest delay;
for L layers that is roughly `L·(2N + 5)` cycles.
