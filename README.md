# Neural network prefetcher using semantic locality

Most hardware prefetchers look for regularity in the address stream itself,
such as fixed strides, repeating deltas or recurring address pairs. This
prefetcher does not. It asks a small neural network to associate the *program
context* of an access with the address delta that tends to follow it. The
context includes the current address, recent instruction pointers, recent
address deltas, the data loaded and the access type. The network learns on-line
while the program runs:

- Every access is remembered together with its context.
- Once an access is old enough that its future is known, the network is
  trained to map its context to the most suitable address that actually came
  after it.
- A prefetch hit, or a prediction that never got used, sends a correction back
  to the context that made the prediction.

This repository holds synthesizable SystemVerilog for the whole prefetcher
except the core and cache around it:

- the context former;
- the association queue and target selection;
- the context hash and the maximal-delta controller;
- a 128-32-32 network computed on one 32x32 systolic array, with
  back-propagation done on the same array;
- prediction decoding;
- the prefetch queue that produces feedback;
- a top level that sequences all of it.

## Overview and data flow

```
 access ──► context_vector ──S0──► nn_unit (systolic_array + weight_store)
   │                                   │ hidden/output neuron values
   │                                   ▼
   │                              pred_decode ──► prefetch_queue ──► pf_addr (confident only)
   │                                   │                 │  demand lookup
   ▼                                   ▼                 ▼
 prefetch_queue lookup         assoc_queue (128)    feedback FIFO ──► retrain context
                                       │ pops S_n
                                       ▼
              assoc_selector ◄── conf_hash, max_delta_fsm
                                       │ targets
                                       ▼
                                nn_unit training step
```

`nn_prefetcher` handles one access at a time, in this order:

1. **Lookup.** It takes the access, forms the context `S0`, and looks up the
   demand address in the prefetch queue. A hit may produce a feedback event.
2. **Inference.** The network computes the 32 hidden and 32 output neuron
   values of `S0`. This takes 72 cycles.
3. **Record.** It pushes `{S0, address, missed, neuron values}` into the
   association queue. When the queue is full, the oldest entry `S_n` leaves it.
4. **Predict.** It decodes the outputs into up to two prefetch candidates.
   Each candidate goes into the prefetch queue. A candidate is also sent to
   memory when the confidence output is high enough.
5. **Select.** The association selector picks training targets for `S_n` and
   updates the context hash.
6. **Train.** The network takes one back-propagation step on `S_n`, starting
   from the neuron values stored when `S_n` was inferred.
7. **Feedback.** Queued feedback events are handled. Each one re-infers its
   context and then takes one training step.

While any of this is going on, `acc_ready` stays low. An access costs about
190 cycles without feedback and about 375 with one feedback event (N = 32).
The core side is expected to drop accesses it cannot hand over. A prefetcher
is only a hint, so dropping accesses is harmless.

## The context vector (`context_vector`)

The network input is 128 bits. Counted from the most significant bit:

| field | bits | source |
|---|---|---|
| address | 32 | current access |
| instruction pointer history | 4 x 8 | bits [8:1] of the last 4 load IPs, newest first |
| address delta history | 4 x 13 | bits [14:2] of the last 4 deltas between consecutive addresses |
| data | 8 | low byte of the value loaded |
| read/write | 1 | |
| addressing mode | 3 | |

The two histories are shift registers that advance on each accepted access.
The history includes the current access: its own instruction pointer, and the
delta from the previous address. Each bit enters the network as 0 or 1.0.

## Network outputs and prediction (`pred_decode`)

The 32 outputs are read as bits. An output above 0.75 is a 1 and an output
below 0.25 is a 0. An output in between is undecided.

| outputs | meaning |
|---|---|
| 15..0 | delta of subset 1, in cache lines, two's complement |
| 30..16 | delta of subset 2, in cache lines |
| 31 | confidence |

The two subsets are two networks that share all weights except their output
rows, and each is trained with a different rule for choosing its target (see
below).

A subset produces a candidate `A0 + delta*64` only if all of its bits are
decided and the delta is not zero. Every candidate enters the prefetch queue.
A candidate is sent to memory only if the confidence output is above 0.5.
Candidates that are not sent are *shadow prefetches*: they never reach
memory, but they still collect feedback, so the network can learn to trust
them.

## The network on a systolic array (`nn_unit`, `systolic_array`, `systolic_cell`, `weight_store`)

This is the part that takes the most care to follow.

### Layout

- The array has N x N cells, with N = 32.
- Row i belongs to output neuron i of the layer being computed.
- Column j belongs to element j of that layer's input vector.
- The weights are stored per column. Bank j holds, for each *tile address*,
  the 32 weights of column j, one per row.
- The hidden layer has 128 inputs, so its weights fill 4 tiles (addresses
  0..3). The output layer fills one more tile (address 4).
- In total that is 5 x 32 x 32 8-bit weights, 5 KB.

### Forward pass (`M_FWD`)

1. A request carries a 32-element input slice `x` and a tile address, and
   enters as a diagonal wavefront.
2. Column j sees the request j cycles after it enters. At that moment it reads
   its weight word from bank j and multiplies each weight by `x[j]`.
3. Row i's partial sum moves one column to the right per cycle. It picks up
   the product of each column as it passes, and leaves column N-1 after N
   cycles.
4. A new request can enter every cycle, so the 4 hidden tiles go in
   back-to-back. Their 4 row sums come out on 4 consecutive cycles and are
   added in 16-bit saturating accumulators.
5. ReLU is applied to the sums. The 32 hidden values are then sent back in as
   one more request, for the output tile.
6. Inference takes `N_IN/N + 2N + 4` cycles from start to done, which is
   72 cycles at the default sizes.

### Transposed pass (`M_TRANS`)

Back-propagation needs the output-layer weight matrix transposed. The array
does not move weights to get it. Instead:

- The error vector enters on the rows, with row i delayed by i cycles.
- Partial sums move *down* the columns.
- Column j collects `sum_i W[i][j] * e[i]`. This is the weighted error of
  hidden neuron j.
- The weights are read in place, at a fixed tile address.

### Update pass (`M_UPD`)

- The wavefront runs as in the forward pass.
- The cell at row i, column j computes `w + e[i] * x[j] * 2^-3`.
- Bank j's word is written back when the wavefront passes column j.
- An update is complete N cycles after it enters, when the last column has
  been written.

### Arithmetic

| item | format |
|---|---|
| values and weights | 8-bit signed fixed point, 6 fractional bits (1.0 = 64; range -2.0 .. +1.98) |
| products | rounded to nearest at that scale |
| sums | 16-bit, saturating |
| activation | ReLU, clipped to 8 bits |

Weights reset to a fixed pseudo-random pattern in -0.25 .. +0.23, a hash of
bank, address and row. A network with all weights equal would never break
symmetry, so the weights cannot reset to a constant.

### A training step

A training step for one context works as follows. `x` is the context, `h` is
the stored hidden vector and `o` is the stored output vector.

```
1. d_k   = slope(o_k) * (t_k - o_k)            for the outputs in the mask, else 0
2. Wout[k][h] += d_k * h_h * 2^-3               (1 update request)
3. e_h   = slope(h_h) * sum_k Wout[k][h] * d_k  (transposed pass, on the updated Wout)
4. Whid[h][i] += e_h * x_i * 2^-3               (4 update requests, one per tile)
```

The output weights are updated before the hidden errors are computed, so
step 3 sees the new output weights. This follows the order of the original
description. Textbook back-propagation would use the old weights, and the
difference is one learning-rate-sized step.

Here `slope(v)` is 1 for `v > 0`. For `v = 0` it is 1/8 rather than 0. With a
slope of 0, an output that had collapsed to zero could never be trained back
up.

The step uses the neuron values saved when the context was inferred, not
values computed afresh. A training step takes about `3N + N_IN/N + 8` cycles,
roughly 110.

## Choosing what to learn (`assoc_queue`, `assoc_selector`, `conf_hash`)

### The association queue

The association queue remembers the last 128 accesses. For each it keeps:

- the context;
- the address;
- a *missed* flag: an L1 miss, or a hit on a line that a prefetch brought in;
- the 64 neuron values.

When a new access is pushed into a full queue, the oldest entry `S_n` pops.

### Choosing targets for `S_n`

The candidate targets for `S_n` are the addresses of the 4 newest accesses,
`A0..A3`. These are accesses that happened "in the future" of `S_n`.
Candidates are removed as follows:

- **Hit filter.** Candidates that hit in L1 are removed. There is no point in
  prefetching them.
- **Zero delta.** Candidates in the same line as `S_n` are removed.
- **Distance limit.** Candidates farther than the current *maximal delta* are
  removed.

Each subset then chooses from the candidates that are left:

- **Subset 1 (closest match).** It takes the candidate whose delta from
  `S_n`'s address differs from `S_n`'s own rounded subset-1 output in the
  fewest bits (`popcount(delta XOR output)`). This pulls the network toward
  the association it already half-predicts, so it does not flip between
  conflicting targets. Ties go to the newest candidate.
- **Subset 2 (recurrence).** It takes the newest candidate whose delta equals
  the one stored in the context hash for `S_n`.

The **context hash** has 256 entries. It is indexed by an XOR fold of the
context and stores the last delta associated with that context. It keeps no
tag, so contexts that alias simply overwrite each other. After each selection,
the hash is written with the subset-2 match if there is one. Otherwise it gets
the subset-1 choice.

A subset that finds no target is left out of the training mask. The
confidence output is not trained from associations.

## Maximal delta limit (`max_delta_fsm`)

Far targets are hard to learn and easy to get wrong, so the distance to a
target is capped. The cap adapts as follows:

1. The cap starts at 0x2000 bytes.
2. Each period of 1024 accesses, the controller compares useful prefetches
   with issued prefetches.
3. If fewer than 25 % were useful, the cap rises by 0x2000. A period with
   nothing issued counts as a low period.
4. After 16 steps, the cap wraps back to 0x2000.
5. After 2 such sweeps, the cap is fixed at the value whose period had the
   most useful prefetches.

## Prefetch queue and feedback (`prefetch_queue`, `sync_fifo`)

The prefetch queue holds the last 32 predictions, whether sent or shadow. Each
entry has the address, the predicting context, the subset, the delta and
whether it was issued. Every demand access is compared against all entries.
How long ago an entry was pushed, counted in later predictions, serves as its
*depth*.

| event | feedback |
|---|---|
| hit at depth >= 4 (the prediction was early enough to be useful) | positive: retrain that context toward its delta, with confidence 1 |
| hit at depth < 4 (too late to help) | negative: retrain the confidence toward 0 |
| entry overwritten without ever being hit | negative: retrain the confidence toward 0 |

Feedback events wait in a 4-entry FIFO. Prefetch addresses leave through
another 4-entry FIFO (`pf_valid/pf_ready`). If either FIFO is full, the event
or address is dropped and counted in `ev`.

## Interface of the top (`nn_prefetcher`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `acc_valid`, `acc_ready`, `acc` | in/out/in | one memory access per handshake. `acc` is `mem_access_t`: `addr`, `lip`, `data`, `rw`, `amode`, `l1_hit`, `pf_hit` (hit on a prefetched line) |
| `pf_valid`, `pf_ready`, `pf_addr` | out/in/out | prefetch requests, line aligned |
| `limit` | out | current maximal delta, in bytes |
| `ev` | out | `nnp_events_t`, one-cycle pulses for each event: access, stall, prediction, issue, shadow, drop, training, filtered, hash match, positive and negative feedback, lost feedback, limit raised |

## Parameters

| parameter | default | origin |
|---|---|---|
| `N` (array size = hidden = outputs) | 32 | described design |
| `N_IN` (context bits) | 128 | described design |
| `AQ_DEPTH` | 128 | described design |
| `D` (candidates) | 4 | chosen |
| `PQ_DEPTH` | 32 | chosen |
| `USEFUL_MIN` | 4 | chosen |
| `HASH_ENT` | 256 | chosen |
| `MD_PERIOD` | 1024 | chosen |
| `LR_SHIFT` | 3 | chosen |
| max-delta step | 0x2000 | described design |
| max-delta threshold | 25 % | chosen |
| max-delta steps per sweep | 16 | chosen |
| max-delta sweeps | 2 | chosen |
| decode thresholds (low / high / confidence) | 0.25 / 0.75 / 0.5 | chosen |

Storage at the defaults:

| item | size |
|---|---|
| weights | 5,120 B |
| association queue | about 10.8 KB |
| prefetch queue | about 0.8 KB |
| context hash | 0.5 KB |

The weights and the association queue together come to about 15.9 KB, in line
with the roughly 15 KB budget of the original design.

## Departures from the original description

- **Number format.** The original uses an 8-bit floating-point format and does
  not define it. This RTL uses 8-bit fixed point (6 fractional bits) with
  16-bit saturating accumulators.
- **Hidden layer size.** The hardware description gives 32 hidden neurons,
  and that is what is built. The evaluation also reports networks with 128
  hidden neurons, and 4- and 5-layer networks. Those need either
  `N = 128`, which means a 128x128 array, or more layers. Neither is built.
- **Output-layer phases.** The description says the output layer takes
  4 further phases. With 32 hidden inputs on a 32-column array, one phase is
  enough, and one is used.
- **Recurrent (LSTM) nodes.** They are an evaluated option without published
  equations and are not built.
- **Feedback strength.** Feedback is binary. The idea of graded feedback
  strength is not built.
- **Sizes the original does not give.** The following are this design's
  choices: the candidate window D, the prefetch-queue size, the "useful depth"
  rule, the context-hash size and hash function, the max-delta period,
  threshold and sweep count, the decode thresholds, the learning rate, the
  ReLU slope at zero, and the reset weights.
- **Schedule.** Inference, training and feedback run one after another on a
  single array, and the access port stalls while they run. The original gives
  no throughput target.
- **Feedback re-inference.** Feedback training first re-infers the stored
  context to get its neuron values. The original does not say where feedback
  gets them.

## Verification

Each block has a self-checking testbench in `tb/`. Each one:

- compares the block against an independent model;
- ends with a line `TB_RESULT checks=<n> failures=<n>`;
- has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_systolic_array` | forward, transposed and update passes against a matrix model, and the result latency (N = 8) |
| `tb_weight_store` | bank reads and writes, and the reset pattern |
| `tb_nn_unit` | bit-exact inference and training against a reference model written in the testbench, the 72-cycle rule `N_IN/N + 2N + 4`, and that repeated training moves outputs toward their targets (N = 8, 32 inputs) |
| `tb_context_vector`, `tb_assoc_queue`, `tb_conf_hash`, `tb_assoc_selector`, `tb_pred_decode`, `tb_prefetch_queue`, `tb_max_delta_fsm` | random stimulus against models written in the testbench |
| `tb_nn_prefetcher` | the whole prefetcher on a synthetic trace of two interleaved array loops (strides of 3 and 2 lines, about a third L1 hits), with the full-size network but smaller queues (16 entries) and a 64-access max-delta period. It counts every mechanism and fails if one never happened: stall, prediction, issued and shadow prefetch, training, hit filter, hash match, positive and negative feedback, limit raise |
| `tb_nn_prefetcher_full` | the same at the default parameters over 1,500 accesses |

`tb_nn_prefetcher_kernels` runs the default-size prefetcher from reset on
two kernel-like traces of 1,600 loads each:

- an array sum: 4-byte loads in order;
- a walk around a 64-node linked list scattered over 8 KB, where each load
  returns the next pointer.

A crude L1 model is used: a load hits if it is in the same line as the
previous load, or if its line was prefetched. The test checks that training
and prediction take place, and it prints the feedback counts:

| kernel | predictions | issued | positive feedback | negative feedback |
|---|---|---|---|---|
| array | 515 | 14 | 8 | 425 |
| list | 2,004 | 10 | 187 | 1,776 |

An earlier version of the list test spread its nodes over 260 KB. In that
run nothing was trained, because every association lay beyond the initial
maximal delta of 8 KB and the trace was too short for the limit to grow.

In the full-size run (1,500 accesses), the counts were:

| event | count |
|---|---|
| predictions | 1,761 |
| issued prefetches | 1 |
| shadow prefetches | 1,760 |
| training steps | 1,220 |
| candidates removed by the hit filter | 1,092 |
| context-hash matches | 466 |
| positive feedback | 66 |
| negative feedback | 1,664 |

On this short synthetic trace, negative feedback dominates. It keeps the
confidence output low, so almost every prediction stays a shadow prefetch.
No claim is made here about prefetch accuracy on real programs.

Two guards are never triggered by the tests:

- **Prefetch FIFO full.** A prefetch address is dropped when the prefetch
  FIFO is full. The test drivers always accept prefetches at once, so this
  never happens.
- **Feedback FIFO full.** A feedback event is dropped when the feedback FIFO
  is full. This cannot happen with the default schedule. One access creates
  at most three events (one lookup hit and two overwritten entries), and the
  FIFO is emptied before the next access is taken.

To simulate with Verilator 5, list the package first:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_nn_unit \
    rtl/nnp_pkg.sv rtl/systolic_cell.sv rtl/systolic_array.sv \
    rtl/weight_store.sv rtl/nn_unit.sv tb/tb_nn_unit.sv
./obj_dir/Vtb_nn_unit
```

For the top, add all the files in `rtl/` and use `tb/tb_nn_prefetcher.sv` or
`tb/tb_nn_prefetcher_full.sv`. The full-size run takes a few seconds. To
change a size, override the module parameters in a testbench. The only
constraint is that `N_IN` must be a multiple of `N`, which an assertion
checks.

Two lint warnings are left on purpose in the top:

- **Unused signals.** Some struct fields and status outputs are not read
  (for example the queue-full flag and the decoded bit vector).
- **`rst_n`.** It is used both as an asynchronous reset and as the
  disable condition of an assertion, which Verilator reports as a mixed
  synchronous and asynchronous use.
