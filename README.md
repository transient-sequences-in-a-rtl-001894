# An adaptive network of five spiking neurons that walks a hypernetwork

Five discrete-time model neurons inhibit each other through a directed
coupling pattern. The pattern makes them fire in three groups, in turn: first
a pair, then another pair, then the fifth node, and around again. Such a
pattern is a *cluster state*. There are exactly 30 of them, written
`s_1 … s_30`. Every so often the network rewires itself. When it does, it swaps
two nodes of the pattern, and the two nodes it picks depend on which group is
firing at that moment. The sequence of cluster states is therefore a walk on a
graph of 30 states, the *hypernetwork*. With no input the walk is irregular.
With a constant input on one neuron it is expected to settle into a fixed path
that ends in a cycle of six states.

This RTL implements that system as the synchronous digital circuit of the
article "Transient sequences in a hypernetwork generated by an adaptive network
of spiking neurons" (Maslennikov, Shchapin, Nekorkin). There it ran on a Xilinx
Artix-7 FPGA and its signals were recorded through 12-bit DACs. The article
gives the equations, the constants, the rewiring rule and the table of cluster
states. It gives no hardware structure. The number format, the timing, the
noise source, the way the active group is detected and the DAC scaling are
therefore choices made here. They are listed in [Departures and choices](#departures-and-choices).

## The neuron

Each node is a two-variable map with a fast variable `x` and a slow variable
`y`, iterated once per time step `n`:

```
x[n+1] = x[n] + F(x[n]) - y[n] + I[n]
y[n+1] = y[n] + EPS * (x[n] - J)
F(x)   = x (x - A) (1 - x) - BETA * H(x - D)        H(u) = 1 if u >= 0, else 0
```

The constants are the article's FPGA settings: `A = 0.1`, `BETA = 0.3`,
`D = 0.45`, `EPS = 0.001`, `J = 0.05`. A node left alone rests just below
threshold, at `x = J`. A node that is inhibited and then released fires a
burst. This *post-inhibitory rebound* is what makes a group fire as soon as
the group that inhibited it falls silent.

`node_map` computes one iteration with three multipliers and registers `x`
and `y` on the step strobe.

### Number format

All real quantities are signed 32-bit two's complement numbers with 24
fraction bits (`hn_pkg::fx_t`). The range is ±128 and the resolution is 6e-8.
Products are formed at 64 bits and shifted right arithmetically, which
truncates toward minus infinity. `hn_pkg::to_fx` rounds the `real` parameters
to this grid at elaboration time. For example, `EPS = 0.001` becomes 16777/2^24.

## Coupling and cluster states

Node `j` inhibits node `i` when `a_ij = 1`. The input to node `i` is

```
I_i = -G * (x_i - NU) * #{ j != i : a_ij = 1 and x_j >= THETA }  + noise_i + stim_i
```

with `G = 0.07`, `NU = -0.5` and `THETA = 0.2`. Because `(x_i - NU)` does not
depend on `j`, `synaptic_coupling` counts the firing presynaptic nodes (0 to
4) and needs one multiplier per node.

A cluster state `<(i1,i2),(i3,i4),i5>` has these eight links:

* `i5` inhibits `i1` and `i2`;
* `i1` and `i2` inhibit `i3` and `i4`;
* `i3` and `i4` inhibit `i5`.

When `i5` stops firing, `i1` and `i2` rebound together and silence `i3` and
`i4`, and so on around the cycle. Order inside a pair does not matter. Order
between the groups does: `s_1 = <(1,2),(3,4),5>` and
`s_26 = <(3,4),(1,2),5>` are different states. The 30 states come from 5
choices of the single node times 6 ways to split the other four into an
ordered pair of pairs. They are tabulated in `hn_pkg::STATE_TABLE`. `state_decoder`
maps the current pattern to its number.

`topology_unit` holds the adjacency matrix `A` (25 bits) and, beside it, the
five node numbers of the tuple. On `load` it builds `A` from the requested state
number. An assertion checks every cycle that `A` still matches the tuple.

## When and how the network rewires

This is the least obvious part of the design. It has three steps.

**When.** A slow variable integrates the mean activity:

```
q[n+1] = q[n] + MU * (x_1 + … + x_5) / 5         MU = 0.001
if q[n] > 1:  q[n] := 0, and the network rewires at this step
```

`q_integrator` reads this as `q[n+1] = MU * X[n]` whenever `q[n] > 1`, and
emits a one-clock `rewire` pulse. The mean field is positive on average, so
`q` climbs, but its slope follows the irregular bursting. As a result the
switching moments are irregular too. With the default constants a switch
comes about every 2·10^4 steps (about one second of model time).

**Which groups.** The rule needs the group that is active at the switch and
the group that was active before it. `cluster_tracker` keeps the active group
as a position 0, 1 or 2 in the tuple. A group counts as firing when any of its
nodes has `x >= THETA`. When a group other than the active one fires, it
becomes active. If both other groups fire in the same step, the one next in
cycle order wins. The previous group is the cycle predecessor of the active
one. Positions are unaffected by a rewiring, which moves nodes rather than
groups, so the register stays valid across a switch.

**Which nodes.** `rewire_select` considers every `k` in the active group and
every `l` in the previous group. It keeps the pair with the smallest clockwise
distance `(l - k) mod 5`. For example, the distance from node 2 to node 3 is 1
and from 3 to 2 it is 4. Ties are possible when both groups are pairs. They are
broken by walking clockwise from the first node of the third (idle) group and
taking the first `k` met. `topology_unit` then applies

```
A := T_kl A T_kl        (T_kl = identity with rows k and l exchanged)
```

This swaps rows `k` and `l`, then columns `k` and `l`. The same swap is applied
to the tuple.

Worked example: `s_1 = <(1,2),(3,4),5>` with group `(1,2)` active. The previous
group is `5`. The distances are 1→5 = 4 and 2→5 = 3, so `k = 2`, `l = 5`. The
new state is `<(1,5),(3,4),2> = s_28`. This is the first step of the article's
stimulus-on-node-1 path `s_1, s_28, s_12, s_24, s_14, …`. The rule, with this
direction of distance and this tie-break, can produce every transition the
article reports:

* both stimulus paths quoted in its text;
* all 30 edges of its reduced hypernetwork for a stimulus on node 1.

Each of these transitions is one of the three a state can take, one per
possible active group (`tb_rewire_select`). The other direction of distance
does not reproduce them.

## Timing

`step_timer` divides the clock into time steps. In the article one step is
50 µs, so spikes last 10–20 steps and bursts about 25 ms. The default
`STEP_CYCLES = 5000` assumes a 100 MHz clock. On the clock edge where `step`
is high, every state register advances at once from the values of step `n`:

* `x` and `y` of every node;
* the five noise LFSRs;
* `q`;
* the active group.

All arithmetic between two strobes is combinational. With 5000 clocks per
step there is no timing pressure, and a pipelined or time-multiplexed datapath
could replace it without changing any result. One clock after the strobe, `dac_valid` pulses. If `q[n] > 1`, `rewire` pulses
in the same cycle. `topology_unit` registers the rewired `A` and tuple on that
pulse, so the new `state_idx` is visible two clocks after the strobe, long
before the next step. The step that follows therefore uses the new topology.
This matches the article's `A[n+1] = T A[n] T`.

The choice of `k` and `l` uses the active group held at the end of step `n`.
This group was last updated at the strobe, from the firing of step `n`. The
cluster tracker and the rewiring therefore see the same tuple.

## Outputs

`dac_formatter` turns `x_1 … x_5` and `q` into six 12-bit offset-binary codes
`floor((v + 1) * 2048)`, saturated to 0…4095. The codes are registered on each
strobe. The article recorded these six channels through external 12-bit DACs.
The DACs and their bus are outside this design, so the codes are parallel
ports.

## Top level: `hypernet_top`

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `run` | in | 1 | enables the time-step strobe |
| `load` | in | 1 | loads `init_state`, `x_init`, `y_init`; clears `q` and the active group |
| `init_state` | in | 5 | initial cluster state 1…30 (other values load `s_1`) |
| `x_init`, `y_init` | in | 5 × fx_t | initial node state |
| `stim` | in | 5 × fx_t | constant stimulus added to each node's input |
| `noise_en` | in | 1 | enables the additive noise |
| `x`, `q` | out | 5 × fx_t, fx_t | node variables and switching variable |
| `state_idx` | out | 5 | current cluster state 1…30 |
| `rewire` | out | 1 | one-clock pulse when `q` crossed 1; the new state follows one clock later |
| `step` | out | 1 | time-step strobe |
| `dac_code`, `dac_valid` | out | 6 × 12, 1 | DAC codes (x_1…x_5, q) and their update pulse |

Hierarchy: `hypernet_top` contains the following blocks:

* `step_timer`;
* 5 × (`noise_lfsr` + `node_map`);
* `synaptic_coupling`;
* `q_integrator`;
* `cluster_tracker`;
* `rewire_select`;
* `topology_unit`;
* `state_decoder`;
* `dac_formatter`.

The types and the state table are in `hn_pkg`. Synthesis of the top gives
about 1100 word-level cells and 640 flip-flops. The 21 multipliers
(5 × 3 in the neurons, 5 in the coupling, 1 in `q_integrator`) dominate the
area.

A typical use:

1. Hold `run` low and pulse `load` with a state, e.g. `s_1`. For initial
   values, set the first pair to `x = 0.5` and the other nodes at rest
   (`x = J`, `y = F(J) ≈ -0.002375`).
2. Raise `run`.
3. Watch `state_idx` change at each `rewire` pulse.
4. Set one `stim` entry to a constant to apply a stimulus.

## Departures and choices

Follows the article:

* the map, the coupling law and every constant (its FPGA settings);
* the 50 µs step;
* the definition of `q` and the switching threshold;
* the `T_kl A T_kl` rewiring and the rule for `k` and `l`;
* the table of 30 cluster states;
* the 12-bit output width.

Choices of this design, where the article is silent or ambiguous:

* **Coupling strength.** The article uses `G = 0.15` in its simulations and
  `G = 0.07` on the FPGA. The FPGA value is the default. `J` is one value
  shared by all nodes, as in the FPGA settings, although the equations allow a
  `J_i` per node.
* **Numbers.** Q7.24 fixed point with truncating products; 100 MHz clock.
* **Noise.** The article only says the input contains additive noise. Here it
  comes from one 32-bit LFSR per node (mask `0x80200003`, a different seed per
  node). It is uniform in ±2^-12 and switchable by `noise_en`.
* **Stimulus.** The article gives no amplitude. The stimulus enters each node's
  input through the `stim` port, scaled as the user chooses.
* **Active group.** Detected by `x >= THETA` as described above. The tie-break
  in the choice of `k` is an interpretation of "the clockwise ordered set
  starting from i5". It agrees with the article's figures.
* **Reset order of `q`.** When `q[n] > 1`, `q[n+1] = MU·X[n]`.
* **Initial conditions.** These come from ports, because the article does not
  give them.
* **DAC scaling.** ±1 full scale, offset binary.

## How far it can be trusted

Every block has a self-checking testbench in `tb/`. The testbenches compare
against values computed independently of the RTL. Most use `hn_ref_pkg`, an
integer reference model with its own copy of the state table and a differently
written rewiring rule. The main ones:

* `tb_rewire_select` checks all 30 × 3 choices of `k` and `l`, and the
  article's reported transitions.
* `tb_topology_unit` checks the rewired matrix against explicit products with
  a permutation matrix.
* `tb_hypernet_top` runs the full network in lockstep with the reference model
  and compares `x`, `q`, the state number, `rewire` and all six DAC codes at
  every step:
  * 2·10^5 steps autonomous with noise;
  * 2·10^5 steps with a stimulus on node 1;
  * 2·10^5 steps with a stimulus on node 2.

  It uses a 2-clock step to run in seconds. It also fails if any mechanism
  never occurs: firing, inhibition, a switch, a switch with each of the three
  groups active, noise, stimulus.
* `tb_hypernet_full` repeats this at the default 5000-clock step, up to and
  beyond the first switch, about 2.3·10^4 steps. It takes about two minutes
  in Verilator.

`tb_workload_stimulus` repeats the article's two stimulus experiments on the
design. In each run, every observed transition is checked to be one that the
rule allows.

* **Stimulus on node 1, starting in `s_1`.** The first step, `s_1 → s_28`,
  matches the article.
* **Stimulus on node 2, starting in `s_11`.** The first two steps,
  `s_11 → s_6 → s_1`, match the article.

After that the two paths drift. Only 6 and 5 of their 14 transitions are
edges of the article's reduced hypernetworks, and neither run settles into
the article's 6-cycle. Picking one of the three allowed successors at random
would hit about one transition in three, so this is no better than chance.
Other stimulus amplitudes from -0.1 to 0.05, with and without noise, gave
between 0 and 9 of 14. The testbench takes `+STIM=<fixed-point integer>` and
`+NONOISE` to repeat such runs.

It is therefore *not* established that this fixed-point network, with these
choices of noise and stimulus, reproduces the article's hypernetwork paths.
The rewiring logic can produce every transition the article reports, given the
active group. Which group is active at a switch, however, is decided by the
neuron dynamics. Those dynamics depend on the stimulus amplitude (0.02 here)
and the noise level, and the article gives neither. Detecting the active group
differently might also matter.

## Simulating

Verilator 5 with `--timing`. From the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/hn_pkg.sv tb/hn_ref_pkg.sv rtl/*.sv tb/tb_hypernet_top.sv \
    --top-module tb_hypernet_top -o sim
./obj_dir/sim
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`. For a block
testbench, list `rtl/hn_pkg.sv`, `tb/hn_ref_pkg.sv`, the block's file and the
testbench. The block parameters (`A`, `BETA`, `D`, `EPS`, `J`, `G`, `NU`,
`THETA`, `MU`) are `real` and are converted to fixed point at elaboration.
The reference model in `tb/hn_ref_pkg.sv` holds the same constants as
integers, so keep the two in step when changing them.
