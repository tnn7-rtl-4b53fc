# A TNN column from the TNN7 macro set

A temporal neural network (TNN) encodes information in *when* a spike happens,
not in how large a value is. A spike is a single 0→1 transition, and its
arrival time within a short window is the data. A TNN *column* of `P` inputs
and `Q` neurons learns to cluster input patterns without supervision. Every
synapse holds a small weight. That weight shapes a ramp response to its input
spike. Each neuron adds its ramps until the sum crosses a threshold, and the
first neuron to fire suppresses the others (winner-take-all). Every synapse
then adjusts its weight from the relative timing of its input spike and its
neuron's output spike (spike-timing-dependent plasticity, STDP).

The TNN7 macro set splits such a column into nine small custom cells. Two
handle synaptic readout and weight update, one does temporal inhibition,
three drive STDP learning, and three are utility converters between pulse and
edge signals. This repository gives synthesizable SystemVerilog for each of
the nine cells, and a full column built from them: `P`×`Q` synapses, `Q`
neuron bodies, 1-winner-take-all, and on-line STDP. The default size is 82×2.
This is the column the TNN7 work lays out for the UCR *TwoLeadECG* time-series
clustering task.

## Time, and the two kinds of spike signal

Two clocks run the column.

* `aclk`, the unit clock, is the finest time step. A spike time is a count of
  `aclk` cycles.
* `gclk`, the gamma clock, separates one input pattern from the next. A rising
  edge of `gclk` starts a *gamma cycle*. `edge2pulse` turns that edge into
  `grst`, a reset pulse one `aclk` cycle long.

Signals carry spikes in two forms:

* **edge-coded**: the line goes high at the spike time and stays high until
  the gamma cycle ends. Inputs `x`, outputs `y` and all timing comparisons use
  this form. With edges, "earlier" simply means "high first".
* **pulse-coded**: the line is high for a bounded number of cycles.
  `edge2pulse` makes a one-cycle pulse from an edge. `pulse2edge` makes an edge
  from a pulse that lasts until the next `grst`. `spike_gen` stretches a pulse
  into the 8-cycle *input spike window* that drives synaptic readout.

One gamma cycle, as the column sees it:

```
cycle:   G0 (grst)   1 .. 7             .. up to 14        next G0
         STDP update inputs may rise    readout windows    STDP update of
         from the    (edge at t starts  end; neurons may   this gamma cycle,
         previous    an 8-cycle window) fire; WTA picks    then clear
         gamma cycle                    the winner
```

The `grst` cycle does two things. First, every weight is updated from the edges
of the gamma cycle that has just ended. Those edges are still visible in that
cycle, because every edge holder clears synchronously at the *end* of it.
Second, all edge, potential and inhibition state is cleared. So inputs must
hold their edges through the `grst` cycle. A new edge may rise from the
cycle after `grst` onward. A gamma cycle must last at least
(latest input time + 8) cycles after `grst`, so that every readout window ends
before the next update. An assertion in `synapse` checks this.

## Readout by counting a weight down

This is the least obvious part of the design. A synapse has no separate
counter for its response. The 3-bit weight register itself counts.

When an input spike arrives, `spike_gen` opens an 8-cycle window. During that
window `syn_weight_update` decrements the weight by one in every cycle, modulo 8.
Eight decrements of a 3-bit value bring it back to where it started, so the
stored weight survives the readout. Meanwhile `syn_readout` keeps its output
high from the first cycle of the window until the cycle in which the weight
reads zero. A one-bit register inside `syn_readout` remembers that zero was
reached, so the output does not rise again after the count wraps to 7.

For weight `w` the response is therefore `w` consecutive ones starting at the
input spike, for example `w = 3`:

```
cycle in window   0 1 2 3 4 5 6 7
weight register   3 2 1 0 7 6 5 4   (back to 3 afterwards)
syn_readout out   1 1 1 0 0 0 0 0
```

The neuron body adds these unary responses every cycle. Its potential then
rises with slope equal to the number of active synapses and stops rising for a
synapse after `w` cycles. That is the *ramp-no-leak* (RNL) response: a ramp of
height `w` that never decays within the gamma cycle.

`spike_gen` is only the next-state logic of the window counter. The 3-bit state
register for each input row is in `tnn_column`, and all `Q` synapses of that
row share the window.

## Learning: STDP cases, direction and stabilization

In the `grst` cycle each synapse classifies its last gamma cycle. `ein` is its
input edge and `eout` its neuron's output edge after winner-take-all.
`less_equal(ein, eout)` says whether the input came no later than the output.
Its negation, `greater`, goes to `stdp_case_gen`:

| case | name    | condition                     | weight step                |
|------|---------|-------------------------------|----------------------------|
| 0    | capture | input and output, input first or same cycle | +1 if `capture` BRV and `F+(w)` |
| 1    | minus   | input and output, input later  | −1 if `backoff` BRV and `F−(w)` |
| 2    | search  | input, no output               | +1 if `search` BRV          |
| 3    | backoff | output, no input               | −1 if `backoff` BRV         |
| —    | none    | neither                       | none                       |

`incdec` makes `inc`/`dec` from the case and from Bernoulli random variables
(BRVs). These are random bits, each high with a chosen probability. Cases 0 and
2 can increment, cases 1 and 3 can decrement. `stabilize_func` is an 8:1
multiplexer built as a tree of seven 2:1 multiplexers. It selects, by the
current weight, one of eight BRVs (`f_plus[w]` or `f_minus[w]`). With
probabilities that depend on `w`, this pushes weights toward 0 or 7 and helps
learning converge. Each synapse has two such multiplexers, one for each
direction. `syn_weight_update` then applies the step, saturating at 0 and 7. It
holds the weight if both requests come at once.

The BRVs come from outside. The column takes them as one `brv_t` bundle
(`tnn7_pkg`) per cycle, and every synapse of the column shares it. The
testbenches drive it with `$urandom`. A real system would use per-synapse
random sources, such as LFSRs, to decorrelate updates. The shared bundle is a
simplification of this design.

## Neuron bodies and winner-take-all

`neuron_body` adds the `P` responses of its synapses every cycle into a
potential. The adder is written as a loop that synthesis turns into an adder
tree. `fire` is high once `potential + this cycle's responses >= theta`, so a
neuron can fire in the same cycle its sum crosses the threshold. `theta` is a
run-time input, because no fixed threshold belongs to the design. `pulse2edge`
turns `fire` into the neuron's edge.

`wta` implements 1-winner-take-all from `less_equal` cells. Each neuron's edge
is compared against the OR of all edges, which is the earliest spike in the
column. So every neuron that fires later is suppressed for the rest of the
gamma cycle. If several neurons fire in the same first cycle, all of them pass
`less_equal`. A priority pick then keeps the lowest index, so that at most one
output is ever high. The winner's edge is both the column output `y` and the
`eout` used for STDP.

## The cells, one by one

| module             | kind          | what it computes |
|--------------------|---------------|------------------|
| `syn_readout`      | 1 flip-flop + gates | `out = input_spike & (w != 0) & !zero_seen` |
| `syn_weight_update`| combinational | window: `w-1` mod 8; else saturating ±1 |
| `less_equal`       | 1 flip-flop + gate | `out = data_in & !blocked`; `blocked` set when `inhibit` is high before `data_in` |
| `stdp_case_gen`    | combinational | one-hot case, table above |
| `incdec`           | combinational | `inc` = (c0 and capture and F) or (c2 and search); `dec` = (c1 and backoff and min) or (c3 and backoff) |
| `stabilize_func`   | 7 × `mux2`    | `out = f[sel]` |
| `spike_gen`        | combinational | `out` = in or state≠0; next = state+1 while out, else state |
| `pulse2edge`       | 1 flip-flop + gate | `edge` = pulse or held; `held` cleared by `grst` |
| `edge2pulse`       | 1 flip-flop + gate | `pulse = edge & !edge_prev` |

These are composed by `synapse`, `neuron_body`, `wta` and `tnn_column`. Shared
constants and the case encoding are in `tnn7_pkg`.

## Column interface (`tnn_column`)

| port      | dir | width | meaning |
|-----------|-----|-------|---------|
| `aclk`    | in  | 1 | unit clock |
| `gclk`    | in  | 1 | gamma clock; each rising edge starts a gamma cycle |
| `rst`     | in  | 1 | synchronous reset, active high; weights go to 0 |
| `x`       | in  | `P` | edge-coded input spikes |
| `theta`   | in  | `$clog2(7P+1)` | firing threshold |
| `brv`     | in  | 35 | `capture`, `search`, `backoff`, `f_plus[7:0]`, `f_minus[7:0]` |
| `y`       | out | `Q` | edge-coded winner (one-hot or zero) |
| `weights` | out | `Q×P×3` | all weights, for observation |
| `grst`    | out | 1 | the gamma reset / update cycle |

Latency: an input edge at cycle `t` starts its synapses' responses in cycle
`t`, and `y` rises in the cycle the winner's potential reaches `theta`. All
paths from `x` to `y` are combinational within a cycle. The column handles
one input pattern per gamma cycle.

Parameters: `P` (inputs, default 82) and `Q` (neurons, default 2). The weight
width is fixed at 3 bits by `tnn7_pkg::W_BITS`, as in the TNN7 cells. Larger
columns are a parameter change. The largest single column evaluated for
time-series clustering has 6,750 synapses, for example `P = 270, Q = 25`. The
multi-layer MNIST networks of 0.4 M to 3.1 M synapses would need many columns
and layers that are not described here.

## What follows the macro descriptions and what is this design's own

Taken from the TNN7 cell descriptions: the set of nine cells and their roles.
Also their port names. The readout-by-wraparound scheme. The one-register
structure of `syn_readout`, `pulse2edge` and `edge2pulse`. The
mux-tree wiring of `stabilize_func`. Which STDP case increments and which
decrements, and which BRV input pairs with which case in `incdec`.

Chosen here, because the descriptions do not fix them:

* All cells are synchronous to `aclk`. The original `less_equal` is a
  transistor pair that holds its state on a circuit node. Here a flip-flop
  cleared by `grst` holds it.
* `grst` clears state synchronously, and weights update in the `grst` cycle
  from the edges of the gamma cycle just finished.
* `f`/`min` of `incdec` are read as the increment and decrement stabilization
  terms. They gate capture and minus respectively.
* Learning steps saturate at 0 and 7. A simultaneous increment and decrement
  request leaves the weight unchanged.
* The winner-take-all tie break to the lowest index, the threshold as a
  run-time input, the reset weight of 0, and one shared BRV bundle per column.
* The potential saturates at its width instead of wrapping.
* `spike_gen` gives exactly 8 cycles for input pulses of up to 8 cycles. A
  longer pulse, still high when the count wraps, opens a second window. In the
  column the pulse always comes from `edge2pulse` and lasts one cycle.

The transistor-level parts of the original cells, such as gate-diffusion-input
multiplexers and level restorers, have no RTL counterpart. The same goes for
the 7 nm physical views. Power, delay and area figures therefore do not carry
over to this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* Combinational cells (`syn_weight_update`, `stdp_case_gen`, `incdec`,
  `stabilize_func`) are checked exhaustively against reference expressions.
* `syn_readout`, `spike_gen`, `pulse2edge`, `edge2pulse` and `less_equal` are
  checked cycle by cycle over all weights, pulse widths and arrival orders.
* `tb_synapse` runs 400 gamma cycles of random spike times and BRVs against a
  weight model, and requires all four STDP cases to occur.
* `tb_tnn_column` (8×3, 600 gamma cycles) and `tb_tnn_column_full` (default
  82×2, 300 gamma cycles) drive the whole column through `gclk`. They compare
  `y` in every cycle and all weights in every gamma cycle against a reference
  model in `tb/tnn_column_check.svh`. That model recomputes ramps, firing
  times, the winner and the STDP updates. Each run must see all four STDP
  cases, saturation at 7 and at 0, gamma cycles with and without a winner,
  WTA ties, and suppressed later neurons.
* `tb_tnn_column_ucr_largest` runs the same checks on the largest
  single-column clustering size, 270×25 = 6,750 synapses, for 60 gamma cycles.
  Verilator needs about six minutes and 3 GB to build it. The run itself takes
  seconds.

To simulate one testbench with Verilator (from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb rtl/tnn7_pkg.sv \
    $(ls rtl/*.sv | grep -v tnn7_pkg) tb/tb_tnn_column.sv \
    --top-module tb_tnn_column -Mdir obj_col
./obj_col/Vtb_tnn_column
```

Replace `tb_tnn_column` by any other testbench name. Lint a module with
`verilator --lint-only -Wall` and the same file list. The full-size column
simulation takes well under a second.
