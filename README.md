# Catwalk: a ramp-no-leak neuron with a unary top-k dendrite

A neuron in a temporal neural network receives one spike volley per
computation: each of its N inputs spikes at most once, and the spike's arrival
time is the input's value. Each synapse answers its spike with a "ramp": its
contribution to the membrane potential grows by one per clock cycle for as many
cycles as its weight, then stays flat. Summed in hardware, this means that every
cycle the neuron must count how many synapses are currently ramping and add that
number to its potential. The usual design counts all N response bits with an
N-input parallel counter (N-1 full adders), sized for the case where every input
ramps at once.

In real volleys only a few inputs are active in any cycle. Catwalk puts a
*unary top-k selector* in front of a much smaller counter: a pruned network of
AND/OR gates that gathers the ones among the N response bits onto K wires. For
the main configuration (N = 16, K = 2) the counter shrinks to one adder cell,
and the selector needs 29 compare-and-swap units, 14 of which are only half
built. The result is exact whenever at most K synapses are active in the same
cycle; when more are active, the extra ones are dropped for that cycle.

This RTL implements that neuron (dendrite, soma, axon), the ramp-no-leak
synapses in front of it, and the elaboration-time pruning that derives the
selector from a sorting network.

## The neuron at a glance

```
 spike_in[i] ─► rnl_synapse[i] ─ resp[i] ─┐
 weight[i]  ──►                           │  N bits per cycle
                                          ▼
                 ┌──────────── dendrite ───────────────┐
                 │ unary_topk (N → K wires)             │
                 │   → compact_pc (K-input counter)     │── count = min(popcount, K)
                 └──────────────────────────────────────┘
                                          ▼
                 soma: potential += count; carry-out ⇒ fire, reload −threshold
                                          ▼
                 axon: 8-cycle output pulse on spike_out
```

| Module | Role |
|---|---|
| `catwalk_top` | N synapses plus one neuron; spike volley and weights in, output spike out |
| `catwalk_neuron` | dendrite + soma + axon, takes the N response bits |
| `rnl_synapse` | turns a one-cycle spike into a pulse as long as the weight |
| `dendrite` | `unary_topk` followed by `compact_pc` |
| `unary_topk` | pruned sorting network of `cas_unit`s, N inputs to K outputs |
| `cas_unit` | one compare-and-swap unit (AND + OR), or half of one |
| `compact_pc` | counts the K selected bits with a tree of `full_adder` cells |
| `soma` | 5-bit membrane potential register, adder, threshold check |
| `axon` | 3-bit counter stretching a fire event into an 8-cycle spike |
| `catwalk_pkg` | cas kinds, sorter tables, pruning functions |

Defaults: N = 16, K = 2, 3-bit weights, 5-bit potential, 8-cycle output
pulse. The same RTL elaborates for N = 4, 8, 16, 32, 64 and any 1 ≤ K ≤ N.

## Unary top-k: why AND and OR sort a cycle's bits

Look at the N response bits in a single clock cycle. For two bits, the larger
is their OR and the smaller their AND. A compare-and-swap unit on wires
(i, j), i < j, therefore writes `a & b` back to wire i and `a | b` to wire j:
it never changes how many ones there are, it only pushes them towards the
higher-numbered wire. Any sorting network built from such units (a fixed list
of (i, j) pairs that sorts every input) leaves all the ones on the
highest-numbered wires. So after the network, wire N−1 is 1 if any input is 1,
wire N−2 if at least two are, and so on. Reading the last K wires gives
min(popcount, K) ones, which is all the neuron needs.

Seen over time, a response bit is a unary (pulse-coded) value and the same two
gates compute minimum and maximum of temporally coded values; that is where the
method comes from. The hardware itself only ever works on one cycle's bits and
holds no state.

### Pruning a sorter into a selector

A full sort is more than needed: only the last K wires are read. The pruning
(`catwalk_pkg::topk_net`) walks the network from its last unit to its first,
keeping a set of *live* wires, those whose value at that point still flows
into one of the K outputs. Initially the live set is the K output wires.

* A unit touching no live wire cannot affect the outputs: it is removed.
* A unit touching a live wire is kept, and both of its input wires become live.
* A kept unit with only one live output wire has an output that nobody reads:
  it becomes a *half unit* and only the gate for the live output is built.
  Which gate survives (the OR, towards the outputs, or the AND) is computed per
  unit.

This reproduces the unit counts published for 8-input examples: from the
19-unit optimal 8-input sorter, top-2 keeps 14 units of which 6 are half, and
top-4 keeps 18 with 4 half; from the 24-unit bitonic sorter, 19/6 and 20/4.
For the default 60-unit 16-input sorter, top-2 keeps 29 units with 14 half
(15 full units plus 14 half units that all keep the OR gate: 15 AND and
29 OR gates in all).

`unary_topk` instantiates one `cas_unit` per kept unit with the kind the
function returned; removed units are plain wires. Everything is decided at
elaboration, so the network is pure combinational logic of depth at most that
of the sorter (10 for 16 inputs).

### Which sorter

The cost of the selector depends on the sorter pruned. For 4, 8 and 16 inputs
the package holds the smallest known sorting networks (5, 19 and 60 units),
each stored as a list of (i, j) pairs and checked to sort all 0/1 inputs.

For 32 and 64 inputs no such table is stored. The network is composed instead:
every block of 16 wires is first sorted with the 16-input table, then
neighbouring sorted blocks are merged with the merge stages of Batcher's
odd-even merge sort. A merge of two sorted blocks of p wires compares, for
k = p, p/2, ..., 1, wire i + j with wire i + j + k for j = k mod p,
k mod p + 2k, ... and 0 <= i < k, whenever both wires lie in the same block of
2p. This gives 185 units for 32 inputs, as many as the smallest known
32-input network, and 531 for 64 inputs, ten more than the smallest known
(521). After top-2 pruning they keep 119 units (30 half) and 335 units (62
half). Using another network only means adding a table to `sorter_size` and
`sorter_net`; the pruning does not change.

## The small counter

`compact_pc` counts M bits with full adders only. The inputs are padded with
zeros to 2^c − 1 bits, where c is the count width. Three bits need one full
adder. Larger sizes are split into two halves of (2^(c−1) − 1) bits plus one
spare bit; each half is counted the same way, and the two (c−1)-bit counts are
added by a ripple chain of c − 1 full adders whose carry input is the spare
bit. For 15 inputs this is the classic 11-adder counter (4 + 2·2 + 3) of the
conventional neuron. For the Catwalk default, two selected bits, it is one full
adder with its third input at 0, giving a 2-bit count of 0, 1 or 2.

## Synapse: the ramp as a pulse

The ramp-no-leak response to a spike at time 0 with weight w is
ρ(w, t) = 0 for t < 0, t + 1 for 0 ≤ t < w, and w after that. Its increment
per cycle is 1 for the first w cycles and 0 after, so the synapse only needs to
emit a pulse of w ones. `rnl_synapse` raises `resp` in the spike cycle itself
(combinationally, so the ramp is already 1 at t = 0) and loads a 3-bit
down-counter with w − 1 for the remaining cycles. A weight of 0 gives no pulse;
a second spike during a pulse restarts it.

## Soma: threshold by overflow

The soma does not store the potential itself but potential − threshold, in a
5-bit register. On reset (and after each fire) the register is loaded with
−threshold in two's complement. Each cycle the dendrite count is added; when
the 5-bit addition carries out, the potential has reached the threshold. That
carry is `fire`: in that cycle the register is reloaded with −threshold
instead of the sum, and the rest of that cycle's count is discarded. No
comparator is needed. The threshold must be 1…31 (an assertion in `soma`
flags a zero threshold when it is loaded). The neuron fires when the
potential *reaches* the threshold, which is what the overflow gives.

After a fire the neuron starts accumulating again from zero within the same
volley and may fire again; nothing inhibits it.

## Axon: the output spike

`fire` is a single cycle. The axon turns it into an 8-cycle pulse on
`spike_out` using a 3-bit counter and a busy flag; the pulse starts at the clock
edge after the fire cycle. A fire arriving while a pulse is still being sent is
ignored.

## Interface and timing of `catwalk_top`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk` | in | 1 | clock (the design is one clock domain) |
| `rst` | in | 1 | synchronous neuron reset, applied between volleys |
| `spike_in` | in | N | input spikes, one cycle high at the spike time |
| `weight` | in | N × 3 | synaptic weights, unpacked array |
| `threshold` | in | 5 | firing threshold, 1…31 |
| `fire` | out | 1 | the potential reached the threshold this cycle |
| `spike_out` | out | 1 | 8-cycle output spike |
| `potential` | out | 5 | soma register, potential − threshold (mod 32) |

A volley is applied as: one cycle with `rst` high (clears the synapses, loads
the soma with −threshold, ends any output pulse), then the spikes at their
times. An input that never spikes encodes "infinity". A spike in cycle t
contributes to the count of cycle t; `fire` is combinational in the cycle the
count crosses the threshold; `spike_out` follows one edge later. There is no
pipelining: the critical path runs from the synapse counters through the
selector and two adders to the potential register.

Weights arrive on ports; storing them and learning them (for example by spike
timing dependent plasticity) is outside this design.

## Where this RTL departs from, or fills in, the published design

Follows the published description:

* top-k selector in front of a K-input counter, one adder cell for K = 2;
* pruning of a sorting network into full and half compare-and-swap units, with
  the published unit counts reproduced;
* smallest known sorters for up to 16 inputs;
* 5-bit membrane potential loaded with −threshold, adder carry as the fire
  condition and as the reload select together with reset;
* 3-bit axon counter and 8-cycle output pulse;
* ramp-no-leak response as a pulse of weight width.

Choices of this design where the description is silent:

* the synapse circuit (a down-counter) and 3-bit weights; the published neuron
  excludes the synapses;
* which gate goes to which wire is derived from the required behaviour (ones
  must gather on the selected wires), not read from drawings;
* the output of a dropped half-unit gate is driven to 0;
* the counter's and soma adder's spare carry inputs are tied to 0;
* synchronous reset, also blocking `fire` in its cycle;
* the axon's busy flag, its one-cycle delay and ignoring fires during a pulse;
* a second spike on an input restarts its pulse;
* the threshold is a port, not a constant.

Departures:

* 32- and 64-input selectors are pruned from composed networks (16-input
  optimal blocks plus Batcher merges), not from the smallest known ones; for
  64 inputs the sorter has 10 more units than the smallest known.
* The counter of the earlier design folds its last input into the soma
  adder's carry input; here the counter is self-contained and the soma's
  carry input is 0.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and stops on a watchdog:

* `tb_cas_unit` – all input pairs, full and both half units.
* `tb_unary_topk` – all 65 536 patterns for N = 16, K = 2; random patterns for
  N = 8/K = 4, N = 32 and N = 64; pruning counts against the published 8-input
  numbers and the network sizes quoted above.
* `tb_compact_pc` – exhaustive for 2, 3, 4, 7 and 15 inputs, random for 16
  and 64.
* `tb_dendrite` – all 65 536 patterns; the count must be min(popcount, 2).
* `tb_rnl_synapse` – running sum equals ρ(w, t) for every weight; random spikes.
* `tb_soma`, `tb_axon`, `tb_catwalk_neuron` – cycle-by-cycle against integer
  models, with resets and threshold changes.
* `tb_catwalk_top` – end to end at the default size. The first volley is a
  hand-worked example: spikes at cycles 0, 1 and 4 with weights 4, 7 and 3,
  a fourth input with weight 7 that never spikes, threshold 10. The ramps sum
  to 1, 3, 5, 7, 9, 11 after cycles 0…5, so `fire` must come in cycle 5. Then
  random volleys, 400 in all, with sparse,
  medium and dense spiking, compared every cycle with a model written from the
  neuron's definition (input i active while t_i ≤ t < t_i + w_i, increment
  capped at 2). It also counts, and requires at least once, each behaviour:
  clipped cycles, fires, repeated fires in a volley, silent volleys, fires
  ignored during a pulse, pulses cut by reset, inputs without a spike and zero
  weights.
* `tb_catwalk_workloads` – the 16-, 32- and 64-input neurons with top-2 on
  sparse volleys (10 % of inputs spiking), using the helper
  `catwalk_volley_env`.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/catwalk_pkg.sv tb/tb_catwalk_top.sv --top-module tb_catwalk_top -o sim
./obj_dir/sim
```

`-Irtl -Itb` lets Verilator find each module in the file of the same name.
Each testbench finishes in well under a second. To change the size, set the
parameters of `catwalk_top` (`N`, `K`, `W_BITS`, `P_BITS`, `PULSE_CYCLES`).
The models in the testbenches assume K = 2, 3-bit weights and a 5-bit
potential.

## What the results mean and what they do not

The testbenches show that the RTL does what the neuron definition above says,
including the deliberate loss when more than K synapses ramp in the same cycle.
They say nothing about how often that loss changes a network's classification;
the published work also leaves that open. Area and power figures for this
design come from a 45 nm standard-cell flow at 400 MHz and are not reproduced
here: the RTL is technology independent.
