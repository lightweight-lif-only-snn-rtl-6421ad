# A LIF-only spiking neural network accelerator working in differential time

This is synthesizable SystemVerilog for a feedforward spiking neural network
(SNN) accelerator whose neurons are all leaky integrate-and-fire (LIF) neurons,
after the architecture of "Lightweight LIF-only SNN accelerator using
differential time encoding" (Windhager, Ratschbacher, Moser, Lunglmayr). The
RTL is an independent implementation of that architecture; where the
publication leaves a detail open, the choice made here is named below.

The central idea is how spikes are represented. A spike train is not sent as
absolute time stamps (as in address-event representation) nor as one bit per
time step, but as a sequence of short numbers, each the time since the
previous spike. With 2-bit symbols a gap of 0, 1 or 2 steps is one symbol, and
the largest value, 3, is an *overflow symbol*: three steps pass without a
spike. Two such trains can be merged into one time-ordered train without ever
converting back to absolute time: compare the two head symbols, send the
smaller one, subtract it from the other head, and take the next symbol from the
train that was sent. A binary tree of these mergers turns all input trains of
the network into one stream of spikes, each tagged with the number of the
train it came from. That number directly addresses a weights memory, and every
neuron of the next layer adds its weight in the same cycle. With a leak factor
of one half, decaying a potential by `dt` steps is a right shift, so the whole
accelerator needs no multiplier.

The default build is the MNIST network of the publication's ASIC:
400 input spike trains (one per 9x9 patch position of a 28x28 image) and fully
connected layers of 800, 512, 256 and 10 neurons.

```
 in_* (400 trains, 2-bit code) 
        |
  spike_merger_tree  (399 spike_merger elements, 9 levels)
        | (dt, kind, synapse index 0..399)
  snn_layer 400->800   layer_controller + weight_memory (63 SRAM blocks)
        |                + 800 neuron_core + lopd
  snn_layer 800->512   (40 SRAM blocks)
        |
  snn_layer 512->256   (20 SRAM blocks)
        |
  snn_layer 256->10    (1 SRAM block)
        |
  out_* (dt, kind, output neuron 0..9)
```

All layers are separate hardware and work at the same time on different parts
of the spike stream.

## Tokens

Inside the chip a spike stream is a sequence of tokens (`snn_pkg::dtok_t`):
a 2-bit differential time `dt` and a kind.

| kind       | meaning                                                     |
|------------|-------------------------------------------------------------|
| `TK_SPIKE` | a spike, `dt` steps after the previous token of the stream   |
| `TK_IDLE`  | `dt` steps pass, no spike                                   |
| `TK_END`   | the stream is finished; ends one inference                  |

Every stream carries a synapse index alongside (the input train number after
the merger tree, the neuron number after a layer). Time starts at 0 for each
inference.

The kind field is an addition to the plain 2-bit code. The chip's inputs use
the plain code (3 = overflow); the leaves of the merger tree turn code 3 into
`TK_IDLE` with `dt = 3`. The field is needed because a merger subtracts the
other train's gap from an overflow symbol: what remains, say 1, still means
"no spike", but the value 1 would otherwise read as a spike. `TK_END` frames an
inference: a merger forwards the end only when both of its inputs have ended,
so one `TK_END` leaves the tree after the last spike of the last train.

## Merging spike trains (`spike_merger`, `spike_merger_tree`)

A merger element has two head registers, one per input. Each cycle in which
both heads are full and the output is ready:

* the head with the smaller `dt` is sent (a tie goes to the upper input `a`);
* that head is reloaded from its input in the same cycle;
* the other head's `dt` is reduced by the value sent.

A finished input (`TK_END`) counts as infinitely late. Each element sends one
token per cycle, and its output comes straight from its head registers, so
each tree level is one pipeline stage.

The element also builds the synapse index. Element level `l` (1 = next to the
inputs) writes bit `l-1` of the index: 0 if input `a` won, 1 if input `b` did.
After `ceil(log2 M)` levels the index equals the input train number. The tree
for `M` trains uses exactly `M-1` elements: where a node's lower half would
hold no train (M = 400 is not a power of two), the upper child is passed on
unchanged.

Order guarantee: spikes leave the tree sorted by time, and spikes at the same
time sorted by train number. The layer's arithmetic does not depend on this
(see saturation below), but the test benches rely on it.

Latency: `ceil(log2 M)` cycles (9 for M = 400). Throughput: one token per
cycle, which is what bounds the inference time (below).

## One neuron layer (`snn_layer`, `layer_controller`, `neuron_core`, `lopd`)

This is the part that needs the most care. The LIF equation used is

    P_k = P_(k-1) * 2^(-dt) + sum_i w_i s_i - s_out,   s_out = theta if P >= theta

with theta = 1. All input spikes of one time step are added before the
threshold is checked, and a neuron can only fire at a time at which the layer
received a spike.

### Time steps and the two pipeline stages

The layer controller has an accept stage and an execute stage.

* **Accept.** The token is latched. If it is a spike, its synapse index reads
  one row of the weights memory; the row holds the weights of all neurons for
  that synapse and is ready one cycle later.
* **Execute.** All neuron cores get the same controls in one cycle:
  * a spike with `dt = 0` belongs to the current time step: every core adds
    its weight;
  * a token that moves time on (`dt > 0`, or `TK_END`) first *closes* the open
    time step if that step received a spike. Closing means that every core with
    `P >= theta` sets its spike bit and subtracts theta. In the same cycle the
    potentials decay by `dt` (an arithmetic shift) and, for a spike, the new
    weights are added;
  * `TK_END` closes the last step and clears all potentials for the next
    inference;
  * `TK_IDLE` with `dt = 0` does nothing.

Per core, one cycle does threshold, then subtract, then shift, then add, in
that order (`neuron_core`).

### Sending the layer's spikes: LOPD and the delay register

After a step has closed, the fired neurons' spike bits are waiting in the
cores. The leading-one position detector (`lopd`, a balanced priority tree)
picks the lowest-numbered one. That neuron number becomes the synapse index of
an output token, and its bit is cleared. One spike leaves per cycle.

The output stream must keep the input's timing. The controller's *delay
register* (`pending`) holds the time between the layer's last output token
and the step that is open now. When the step closes:

* if neurons fired, the first spike token carries `pending` as its `dt`, and
  the other spikes of that step carry 0;
* if nothing fired and `pending > 0`, a `TK_IDLE` token with `dt = pending`
  is sent, so the time is not lost;
* `pending` then takes the `dt` of the token that closed the step.

Each output `dt` is therefore the `dt` of one input token, never larger than
3, and 2 bits stay enough between layers.

### Stalls

A token that would close a step has to wait in the execute stage while the
previous step's spikes (or its idle or end token) are still being sent, since
each core has only one spike bit. While it waits, `in_ready` is low and the
previous stage (the merger tree or the previous layer) holds its tokens.
Spikes with `dt = 0` are not affected: they keep flowing while the LOPD
drains. The `stall` output of each layer is high in every cycle a token waits.

### Timing

* Weight read: request in the accept cycle, weights used in the next
  (execute) cycle.
* A token accepted in cycle t that closes a step in which neurons fired gives
  the first output spike in cycle t+2, then one spike per cycle.
* When nothing waits downstream, a layer takes one token per cycle.

### Numbers in the neuron core

The publication gives beta = 0.5 and theta = 1 but no number format. This
design uses

| quantity  | format                                  | parameter           |
|-----------|-----------------------------------------|---------------------|
| weight    | signed, 5 bits, 3 fraction bits (-2 .. 1.875) | `W_W = 5`, `W_FRAC = 3` |
| potential | signed, 12 bits, 3 fraction bits, saturating | `P_W = 12` |
| theta     | 1.0 = 8 LSB                             | `1 << W_FRAC`       |
| decay     | `P >>> dt` (rounds toward minus infinity) | -                 |

The weight width of 5 bits comes from the SRAM count of the publication's
ASIC: with 64-bit wide blocks a layer needs `ceil(N_out * W / 64)` blocks in
parallel, and W = 5 gives 63 + 40 + 20 + 1 = 124 blocks, the number the
layout uses (4 bits would give 99, 6 bits 149). Saturation makes the order
of the adds within one step matter at the limits; the hardware adds them in
arrival order, which is ascending synapse index.

## Weights memory (`weight_memory`, `sram_1024x64`)

Row `i` of a layer's memory holds the weights from synapse `i` to all
neurons: neuron `n` in bits `[5n +: 5]`. The row is split over SRAM blocks of
1024 words x 64 bits placed side by side: block `b` holds row bits
`[64b +: 64]`. A weight may straddle two blocks. All blocks of a layer are read
together by the same synapse index.

| layer     | row bits | SRAM blocks | rows used |
|-----------|---------:|------------:|----------:|
| 400 -> 800 | 4000   | 63          | 400       |
| 800 -> 512 | 2560   | 40          | 800       |
| 512 -> 256 | 1280   | 20          | 512       |
| 256 -> 10  | 50     | 1           | 256       |

`sram_1024x64` is a plain array with a single port and a synchronous read, a
stand-in for a foundry SRAM macro of that size; swap in a real macro with the
same behaviour for an ASIC.

Weights are loaded through the top-level `wr_*` port, one 64-bit word per
cycle: `wr_layer` selects the layer, `wr_bank` the block, `wr_addr` the row.
Loading must not overlap with running the network. The loading scheme is this
design's own.

## Top-level interface (`snn_accelerator`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (all state but the SRAM contents) |
| `in_valid`, `in_ready` | in/out | 400 | per-train handshake; a symbol moves when both are high |
| `in_code` | in | 400 x 2 | 2-bit differential time, 3 = overflow symbol |
| `in_eos` | in | 400 | the train ends here (this symbol carries no time) |
| `out_valid`, `out_ready` | out/in | 1 | output handshake |
| `out_tok` | out | 4 | kind and `dt` of the last layer's token |
| `out_idx` | out | 4 | output neuron of a spike |
| `wr_en`, `wr_layer`, `wr_bank`, `wr_addr`, `wr_data` | in | 1/8/8/10/64 | weight load |
| `stall` | out | 4 | per layer: a token is held this cycle |

An inference: give each input train its symbols and then one `in_eos`; read
tokens from `out_*` until `TK_END`. The receiver decides what to do with
the output spikes, for instance count them per output neuron. The
publication does not describe the read-out.

Parameters: `NUM_LAYERS` and `LAYER_N` (sizes, input trains first); shared
constants (`DT_W`, `W_W`, `W_FRAC`, `P_W`, SRAM geometry) are in `snn_pkg`. Any
layer with up to 1024 inputs fits the SRAM depth.

## Performance

The merger tree sends one token per cycle and the layers keep up with it,
so an inference takes about as many cycles as the input trains have
symbols. In simulation at the default size, with 400 random trains of 81
time steps (about 32 symbols each), one inference takes about 13,000
cycles. The publication reports about 6,000 inferences per second at 538 MHz
on its ASIC (about 90,000 cycles each) with trained weights and real MNIST
input, which these benches do not have. The two figures cannot be compared
directly, but the default-size bench does fail if an inference takes more
than 89,000 cycles, so a design slower than the published rate is caught.

## Testbenches

Every bench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`.

| bench | what it checks |
|-------|----------------|
| `tb_spike_merger` | random trains with gaps and back-pressure against a merge in absolute time; index bit; one token per cycle |
| `tb_spike_merger_tree` | 11 trains (pass-through nodes), order and index of every spike, latency of `ceil(log2 M)` cycles, one token per cycle |
| `tb_neuron_core` | threshold, reset by subtraction, shift decay, saturation, against a model |
| `tb_lopd` | lowest set bit on 800 and 13 bits |
| `tb_sram_1024x64` | write, read, read data held |
| `tb_weight_memory` | rows across three blocks, weights straddling block borders |
| `tb_layer_controller` | scripted tokens: core controls, weight reads, delayed `dt`, idle tokens, stalls |
| `tb_snn_layer` | random tokens against the LIF reference; output two cycles after a closing token |
| `tb_snn_accelerator` | reduced network 12-16-12-8-4, three inferences, every layer against the reference, counts of stalls, idle tokens, same-step spikes, overflow symbols |
| `tb_snn_accelerator_full` | one inference at the default size 400-800-512-256-10 |
| `tb_snn_400_128_10` | the 400-128-10 network used in the publication's bit-width study |

`snn_ref_pkg` holds the reference model. It works on absolute spike times,
independently of the differential-time machinery: decay by `t - t_prev`,
add all weights of a time step, threshold, subtract. `snn_tb_body.svh` is the
body shared by the three end-to-end benches; each of them also sets a
bound on the cycles one inference may take and a watchdog.

Run a bench with plain Verilator from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_snn_accelerator.sv \
    --top-module tb_snn_accelerator -o sim
./obj_dir/sim
```

The default-size bench takes about two minutes to compile and under a minute
to run.

## Where this design departs from the publication, or fills gaps

Followed as described: the differential-time code with 2-bit symbols and
overflow symbol 3; the min/subtract merger element with two head registers;
the tree of M-1 elements with one index bit per level; per-layer weights
memory addressed by the synapse index, built from parallel 64 x 1024 SRAM
blocks; parallel neuron cores; beta = 0.5 as a shift, theta = 1 with reset by
subtraction; the LOPD turning spike bits back into indices; the layer
controller holding back the differential time until the layer's spikes are
out; one hardware instance per layer; the 400-800-512-256-10 network.

Chosen here, because the publication does not say:

* the token kind field (`TK_IDLE`, `TK_END`) and the end-of-train framing;
* valid/ready handshakes everywhere, and a synchronous active-low reset;
* index bit 0 for the upper merger input, 1 for the lower, so that the index
  equals the train number; ties go to the upper input;
* the LOPD serves the lowest neuron number first;
* weight width 5 bits (derived from the SRAM count), 3 fraction bits,
  12-bit saturating potential, shift rounding toward minus infinity;
* potentials cleared at the end of every inference;
* the two-stage layer pipeline, the stall rule and `TK_IDLE` tokens to carry
  time across steps in which no neuron fired;
* the weight-load port.

Not included:

* The learned input encoder (an LIF neuron fed serialized image patches with
  weights restricted to -1, 0, +1). It is part of training in the
  publication, is not listed among the chip's components, and its mapping of
  patches to encoding neurons is not fully specified. The accelerator takes
  ready spike trains.
* The foundry SRAM macros themselves (modelled by `sram_1024x64`), and
  anything below RTL (floorplan, clocks, pads).
* The CIFAR-10 network, whose size is not given. Its layers are a matter of
  `NUM_LAYERS`/`LAYER_N`.
