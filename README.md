# Event-driven SNN accelerator with on-chip STDP learning and connection pruning

A spiking neural network that learns on chip with spike-timing-dependent
plasticity (STDP) spends most of its learning time visiting connections. Most
of those connections end up useless: after training, over 90 % of them can be
removed without hurting accuracy. This design removes them *while* the network
is still learning, so that every later spike and every later weight update
skips them. It prunes in two stages:

* **Dynamic pruning**, every *k* learning iterations. Each connection carries a
  prune score

      P = (d / w) * t_post

  where `d` is how many times STDP has depressed the connection in the last
  *k* iterations, `w` its current weight and `t_post` the time step at which
  its postsynaptic neuron last fired. A connection with `P > alpha` is
  removed. Dividing by `w` makes weak, often-depressed connections go first.
  Multiplying by `t_post` takes care of a timing effect. A neuron that fires
  early depresses many inputs that simply had no time to contribute. Those
  inputs may still be useful, so their depressions count for less. A neuron
  that fires late has given every input a chance, so its depressions count
  for more.
* **Post-learning pruning**, once per layer after it has finished learning:
  every connection with `w < beta` is removed.

A removed connection is a weight of exactly zero in the weight memory. The
processing elements (PEs) and the STDP unit treat a zero weight as absent.

The network is a feed-forward SNN of integrate-and-fire neurons with
time-to-first-spike coding. Every neuron fires at most once per input sample.
The default size is that of a three-layer convolutional network for the
Caltech-101 face/motorbike task. Its kernels are 5x5 (4 of them), 17x17 (20)
and 5x5 (20).

## Block structure

```
 host ──cmd──► io_handler ──► controller ──────────────┬──────────────┐
      ◄─rsp──              ◄──                         │              │
                             │  │  │  │                │              │
             presynaptic_mem ┘  │  │  └─ spike_mem     │              │
                                │  │                   │              │
         ┌──────── weight_mem ◄─┴──┼─── (port owned by controller,    │
         │           ▲  ▲          │     stdp_unit or prune_unit)     │
         ▼           │  │          ▼                                  │
   pe[0..N_PE-1]  stdp_unit ───► decrement_track_mem ───► prune_unit ◄┘
   + potential_mem
```

| Module | Role |
|---|---|
| `snn_pkg` | Widths, number formats, command/response types, network table |
| `io_handler` | 4-entry command FIFO from the host, response register to it |
| `controller` | Runs samples, time steps, STDP and pruning. Holds the parameter registers and event counters |
| `weight_mem` | All weights of all three layers. Each word holds N_PE 16-bit lanes |
| `presynaptic_mem` | Spike time of each input of the current sample |
| `pe`, `potential_mem` | One integrate-and-fire lane per PE. It owns NPP neurons and their 32-bit potentials |
| `spike_mem` | List of (neuron, time) of the spikes in the current sample, plus a fired bit per neuron |
| `stdp_unit` | Weight updates for a neuron that fired. It also counts depressions per connection |
| `decrement_track_mem` | `d` per connection, `t_post` per neuron |
| `prune_unit` | Both pruning criteria, N_PE connections per step |
| `neuromorphic_accelerator` | Top level: connects the blocks and arbitrates the shared memory ports |

The host does the work outside the chip. It filters the image and turns it
into spikes. It picks receptive-field windows, pools between layers and
classifies the features. None of these parts is in the RTL.

## What one layer is, and how its weights are laid out

Convolution is not done inside the chip. A layer is learned as a dense set of
kernels over one receptive-field window:

* the **presynaptic inputs** are the window's elements (width x height x input
  channels);
* the **postsynaptic neurons** are the kernels.

| Layer | Window | Inputs (`n_pre`) | Kernels (`n_post`) | Weights |
|---|---|---|---|---|
| 1 | 5x5 x 2 DoG channels | 50 | 4 | 200 |
| 2 | 17x17 x 4 | 1156 | 20 | 23,120 |
| 3 | 5x5 x 20 | 500 | 20 | 10,000 |

The input channel counts are a reading of the kernel sizes: the third number
in each kernel size is taken as the number of kernels. Two DoG channels
(ON/OFF) feed the first layer. With that reading, 33,320 weights at 92.83 %
pruning leave 2,389, close to the 2,383 learnable parameters reported for
the pruned network.

The N_PE = 4 PEs each own NPP = 5 neurons, so 20 neurons in all. Neuron `post`
lives in PE `post % N_PE` under local index `post / N_PE`. A weight-memory
word holds, for one input `pre` and one local index, the weights of the N_PE
neurons that share that local index:

```
word address = base + pre * NPP + post / N_PE      lane = post % N_PE
```

One read therefore gives every PE its weight at once. `base` is the first word
of the layer (`snn_pkg::layer_base`). Each layer takes `n_pre * NPP` words
whatever its `n_post`. All three layers fit at once in the default 8,530
words x 4 lanes: 1,706 inputs x 5 words. Pruned connections stay in place as
zeros, so pruning saves work but not memory.

## Number formats

| Quantity | Format |
|---|---|
| weight `w`, rates `a+`, `a-`, threshold `beta` | unsigned Q0.16 (`w = code / 65536`), 16 bits |
| membrane potential, threshold `V_th` | unsigned, 32 bits, sum of Q0.16 weights (Q16.16), saturating |
| time step | 8 bits. The first step of a sample is **1**, so `t_post` is never 0 |
| decrement count `d` | 10 bits, saturating at 1023 |
| `alpha` | 16-bit unsigned integer |

## Host interface

The host sends `cmd_t {op, post, pre, data}` words with a valid/ready
handshake. The FIFO holds 4 words. Once `cmd_valid_i` is raised it must stay
up, with the same word, until accepted; an assertion checks this.

Responses `rsp_t {kind, post, time_step, data}` come out as one-cycle
`rsp_valid_o` pulses. They have no back-pressure, and the host must take
them.

| Command | Effect | Busy cycles |
|---|---|---|
| `OP_SET_PARAM` (`pre` = parameter id) | `P_VTH`, `P_APLUS`, `P_AMINUS`, `P_ALPHA`, `P_BETA`, `P_K`, `P_FLAGS` = {wta, dyn_prune_en, learn}, `P_BASE`, `P_NPRE`, `P_NPOST`. Writing `P_BASE` selects a layer. It also clears the decrement memory and the iteration count. | 1 |
| `OP_WRITE_W` / `OP_READ_W` | Host access to the weight of (`pre`, `post`) in the current layer. A read answers `RSP_WEIGHT`. | 1–2 |
| `OP_START_SAMPLE` | Clears potentials, input spike times and the spike list. Restarts time at step 1. | 1 |
| `OP_SPIKE` (`pre`) | Input `pre` spikes in the current step: its time is recorded and its weights are added to every neuron's potential | `ceil(n_post/N_PE) + 1` |
| `OP_END_STEP` | Threshold check, spikes out as `RSP_SPIKE`, STDP for each new spike, then the next step | `n_post + 1` + per spike (learning): `2*n_pre - z + 2` |
| `OP_END_SAMPLE` | Counts a learning iteration. On every k-th one (learn and dyn_prune_en set, k ≠ 0) it runs dynamic pruning. Answers `RSP_DONE` with the number pruned. | 1, or about `2*n_pre*NPP` with pruning (two per word) |
| `OP_LAYER_DONE` | Post-learning pruning of the current layer. Answers `RSP_DONE`. | about `2*n_pre*NPP` (two per word) |

The values after reset are: threshold 0, `a+` = 0.004 (262), `a-` = 0.003
(197), `alpha` = 65535, `beta` = 0, `k` = 500, all flags off, base 0. The host
sets the rest per layer.

`stats_o` counts:

* potential updates done and skipped;
* LTP and LTD updates;
* STDP visits to pruned connections;
* connections removed by each pruning stage;
* dynamic pruning passes.

With these counts the saving from pruning can be measured directly.

## A time step inside the chip

1. **Spike forwarding.** For each `OP_SPIKE` the controller stores the spike
   time in the presynaptic memory. It then reads the words
   `(pre, 0) .. (pre, ceil(n_post/N_PE) - 1)`, one per cycle. Each PE adds its
   lane to the potential of the matching neuron. The sum saturates at
   2^32 - 1. Lanes of neurons beyond `n_post` are masked. A zero weight is not
   added, and the PE reports a skipped update.
2. **Threshold phase** (`OP_END_STEP`). The controller scans neurons
   `0 .. n_post-1`, one per cycle. All PEs compare the same local index with
   the threshold in parallel, and the controller takes the lane it needs. A
   neuron fires when:
   * its potential is strictly above `V_th`;
   * it has not fired in this sample;
   * lateral inhibition does not block it.

   When it fires, its ID and time go into the spike memory and out to the
   host. With the `wta` flag set, the first neuron to fire inhibits every
   other neuron of the layer for the rest of the sample. Ties within a step
   go to the lower index. With the flag off, every neuron may fire once.
3. **Learning.** If `learn` is set, the STDP unit runs once for each neuron
   that fired in this step, in firing order. The controller waits for it.
4. The time step counter advances.

Potentials do not leak and are not reset when a neuron fires. The fired bit
alone keeps a neuron to one spike per sample.

## The STDP unit

For the neuron `i` that fired at `t_post`, the unit walks its inputs
`j = 0 .. n_pre-1`. For each one it reads three things in the same cycle: the
weight word, the input's spike time and the decrement word. The rule is the
multiplicative one that keeps weights inside [0, 1]:

```
input spiked at t_j <= t_post   →  w += a+ * w * (1 - w)       (LTP)
otherwise (later, or no spike)  →  w -= a- * w * (1 - w)       (LTD), d += 1
```

In fixed point:

* `w(1-w)` is `(w * (65536 - w)) >> 16`, which is exact up to truncation and
  at most 16384;
* `dw = (w(1-w) * a) >> 16`;
* LTP saturates at 65535.

LTD can never reach zero, because `dw < w`. Only the prune unit removes
connections, and a removed connection never grows back.

Each input takes two cycles: read, then write back the one changed lane under
a lane mask. The unit writes the whole decrement word back with the
incremented counter. The unit also stores `t_post` for the neuron, for the
prune unit.

A pruned input (zero weight) is skipped without any write. It also costs one
cycle instead of two: in the cycle where the zero weight is seen, the unit
already issues the read of the next input. The only exception is the last
input. A pass therefore takes `2*n_pre - z` cycles, where `z` is the number of
pruned inputs among the first `n_pre - 1`. This is where pruning shortens
learning time.

## The prune unit

Both stages run over the layer's `n_pre * NPP` words, two cycles per word:
read the weight word and the decrement word, then write back the word with
its pruned lanes set to zero. All N_PE lanes are tested in parallel. Lanes
whose neuron index `local * N_PE + lane` is not below `n_post` do not belong
to the layer and are never touched. Weights that are already zero are not
counted again.

**Dynamic mode.** The division is avoided by comparing cross-products:

```
P > alpha   ⇔   d * t_post * 2^16  >  alpha * w_code
```

Both sides are at most 10 + 8 + 16 and 16 + 16 bits wide, so the comparison
is exact. The test uses the neuron's latest spike time from the decrement
track memory. A neuron that never fired has `t_post = 0` and none of its
connections is pruned. After the pass the controller clears all `d` counters
and `t_post` values. Each pass therefore judges only the last *k* iterations.

**Post-learning mode.** The test is `w_code < beta_code`.

Both modes report the number of connections removed in the `RSP_DONE` answer
and in the counters.

## Sharing the memories

The weight memory has one synchronous read port and one masked write port,
with read data one cycle after the request. Three blocks use them: the
controller (spike forwarding and host access), the STDP unit and the prune
unit. The controller starts the STDP or prune unit and then waits for its
done pulse, so at most one of the two is busy at a time. The busy unit owns
the ports; otherwise the controller does. An assertion in the top level
checks that the two units are never busy together. The read port of the
decrement track memory is shared between the STDP and prune units in the
same way.

The decrement memory can be cleared in one cycle: each word has a valid bit,
and a word that has not been written since the last clear reads as zero. The
presynaptic memory uses the same trick.

## Where this design departs from, or adds to, the original description

* **When pruning runs.** The original architecture text says pruning follows
  the STDP work of a time step. The method description says it runs every
  *k* iterations. Here it runs after the STDP work of every k-th learning
  iteration, at `OP_END_SAMPLE`.
* **When STDP runs.** STDP runs at the end of the time step in which a
  neuron fires. With one spike per neuron per sample, this gives the same
  LTP/LTD split as running it at the end of the sample.
* **Which `t_post`.** The score uses the neuron's most recent spike time. The
  original does not say which spike within the *k* iterations counts.
* **Inputs that never spiked** are depressed (LTD).
* **Lateral inhibition** is layer-wide winner-take-all, lowest index first,
  and can be switched off. The original only says that neurons "close" to
  the winner are inhibited.
* **Convolution.** Scanning, weight sharing across positions and pooling are
  left to the host. The chip learns one window per sample.
* **Invented details.** The number formats, widths, host command set, number
  of PEs, FIFO depth, cycle counts and reset values are all this design's
  own. The original gives none of them.
* **Speed of spike forwarding.** Pruning saves potential updates and STDP
  cycles. Spike forwarding still reads every word, even one whose lanes are
  all pruned. So inference takes the same number of cycles, and only the
  update count falls.
* **Clock.** The reference implementation ran at 100 MHz on a Zynq-7000. No
  timing closure has been attempted on this RTL.

## Simulating

Compile the package first and the RTL after it. Then add one testbench, for
example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/snn_pkg.sv $(ls rtl/*.sv | grep -v snn_pkg) tb/tb_stdp_unit.sv \
    --top-module tb_stdp_unit -o sim
./obj_dir/sim
```

Every testbench compares the design with an independent model and ends by
printing `TB_RESULT checks=<n> failures=<n>`. Each one also has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_weight_mem`, `tb_potential_mem`, `tb_presynaptic_mem`, `tb_spike_mem`, `tb_decrement_track_mem` | Read latency, lane masks, single-cycle clear, valid bits |
| `tb_pe` | Accumulation, saturation at 2^32 - 1, zero-weight skip, strict threshold |
| `tb_io_handler` | FIFO order under random valid/ready, full/empty, response timing |
| `tb_stdp_unit` | Every weight, `d` and `t_post` against the rule. Exact cycle count, including the pruned-input shortcut |
| `tb_prune_unit` | Both criteria on random weights/counters, the `n_post` lane bound, cycle count |
| `tb_controller` | The controller with real memories and PEs: spikes, inhibition, one spike per neuron, LTP/LTD direction, busy cycles per command |
| `tb_neuromorphic_accelerator` | End to end at a small size (2 PEs x 3 neurons, two layers of 12x5 and 16x6, 12 samples, k = 3). A cycle-free model predicts every spike, pruning count, weight and counter. The test fails if a mechanism never occurred: firing, inhibition, several spikes per sample, LTP, LTD, skipped STDP and PE updates, dynamic and post-learning pruning. |
| `tb_neuromorphic_accelerator_full` | The same test with every parameter at its default. It runs each of the three layer geometries in turn (50x4, 1156x20, 500x20), with 4 samples per layer and k = 2. |

`accel_tb_body.svh` holds the shared body of the two end-to-end tests. To
change the geometry, change the parameters of `neuromorphic_accelerator`
(`N_PE`, `NPP`, `WORDS`, `MAX_PRE`) and the network table in `snn_pkg`
together.
