# A sparse p-bit Ising machine with copy-node sparsification

An Ising machine looks for low-energy states of

    E = - sum_{i<j} J_ij m_i m_j - sum_i h_i m_i,      m_i in {-1, +1}

by Gibbs sampling. Each spin is a probabilistic bit (p-bit). A p-bit
adds the weighted states of its neighbours into a local field
`I_i = beta (h_i + sum_j J_ij m_j)` and then sets itself to
`m_i = sign(tanh(I_i) - r)`, where `r` is uniform on [-1, 1].

Take a machine in which every spin sees every other spin. Then each
p-bit needs an adder with N inputs. The spins must also update one after
another, so a sweep over all spins takes N clock cycles of a clock that
slows as the adders grow. Sweep time therefore grows about as N².

This design removes both problems by bounding the number of neighbours.
Every p-bit has at most K = 51 neighbours, whatever the problem size:

* **Bounded adders.** Each p-bit's adder has a fixed number of inputs.
* **Parallel updates.** The graph is coloured so that no two neighbours
  share a colour. All p-bits of one colour then update at once, so a sweep
  takes one step per colour instead of one step per spin.

A dense problem is made to fit by **sparsification with copy nodes**.
Every logical node is held by several p-bits (its copies), joined in a
chain by ferromagnetic *copy edges* of weight W0. The node's problem edges
are shared out among its copies.

The RTL implements the default configuration. It is a *master graph* built
from a 100-node all-to-all problem with 2 copies per node: 200 p-bits, at
most 51 neighbours each, 10-bit weights. Smaller problems run on the same
master graph by leaving unused weights at zero.

## Block diagram

```
 host port ──► wr_en/wr_pbit/wr_slot/wr_data ──┐
               load/load_state ────────────────┤
                                               ▼
 start,num_sweeps ─► color_sequencer ─ run,color ─► sparse_network ─ m[199:0] ─► copy_resolver ─► spins, conflict
                      busy,done,sweep_done           200 x pbit                    (sample)         n_conflicts
                                                       ├ weight/bias registers (51 + 1)
                                                       ├ neighbor_adder (adder tree)
                                                       ├ tanh_lut
                                                       ├ pbit_prng (xorshift32)
                                                       └ compare + state flop
```

| file | role |
|---|---|
| `rtl/ising_pkg.sv` | number formats, and the build-time graph compiler: topology, colouring, tanh table, seeds |
| `rtl/pbit.sv` | one p-bit: weight registers, adder, LUT, PRNG, comparator, state |
| `rtl/neighbor_adder.sv` | balanced adder tree computing h + Σ ±J over the wired slots |
| `rtl/tanh_lut.sv` | 128-entry tanh table |
| `rtl/pbit_prng.sv` | per-p-bit xorshift32 random source |
| `rtl/sparse_network.sv` | the master graph: 200 p-bits and their fixed neighbour wiring |
| `rtl/color_sequencer.sv` | runs N sweeps, one colour class per clock |
| `rtl/copy_resolver.sv` | merges copies back into logical spins |
| `rtl/ising_top.sv` | top level |

## The master graph (the hard part)

The wiring is not stored anywhere. It is a pure function of
(`N_LOGICAL`, `COPIES`) in `ising_pkg`, evaluated when the design is
elaborated. `sparse_network` then places one wire per used slot of each
p-bit.

**Numbering.** Logical node `i` has physical p-bit `i` as its first copy.
Its further copies `c = 1..C-1` are p-bits `N + i(C-1) + (c-1)`. For the
default, node 7 is p-bits 7 and 107.

**Copy chain.** Copies `c` and `c+1` of one node are joined by a copy edge.
With 2 copies this is a single edge, i to i'.

**Sharing out the problem edges.** Node `i` has N-1 partners `j`. List them
in increasing order of `j` (with `i` left out). Cut the list into `C`
contiguous chunks of nearly equal length: position `p` belongs to chunk
`floor(p*C/(N-1))`. Copy `c` of `i` holds the edges of chunk `c`.

The logical edge (i, j) becomes one physical edge, between:

* the copy of `i` whose chunk contains `j`, and
* the copy of `j` whose chunk contains `i`.

Each logical edge therefore exists exactly once, and each copy carries
about (N-1)/C problem edges plus one or two copy edges. For 100 nodes this
gives maximum degrees of 51, 35 and 27 with 2, 3 and 4 copies. With 5 nodes
and 2 copies (a full adder) it gives 3.

**Slots.** The neighbours of p-bit `u` sit in numbered slots:

* first, the copy edge to the previous copy (if any);
* then, the copy edge to the next copy (if any);
* then, the problem edges in order of partner index.

`ising_pkg::neighbor(N, C, u, s)` returns the p-bit in slot `s` of `u`, or
-1 if the slot is unused. `ising_pkg::slot_of(N, C, u, v)` is the inverse.
A host uses them to decide where each weight goes.

**Colouring.** A greedy colouring in p-bit index order gives each p-bit the
smallest colour not used by a lower-numbered neighbour. The default graph
needs 51 colours, so one Monte Carlo sweep (every p-bit updated once)
takes 51 clock cycles. The sweep time depends on the maximum degree, not on
the problem size.

**Running smaller problems.** A problem of fewer than 100 nodes uses a
subset of the master nodes and leaves all other weights at 0. If the
problem's nodes are the first ones (0..n-1), all their mutual edges land in
the first copy: the problem then runs unsparsified. To exercise the copies,
spread the nodes over the master graph, for example problem node `a` on
master node `a*100/n`.

## Programming model

All numbers are signed 10-bit fixed point with 3 fraction bits (s6.3):
range -64 .. +63.875, step 1/8. Weights are stored **already multiplied by
the inverse temperature beta**. There is no multiplier on chip; annealing
means rewriting the weights.

1. **Write weights.** For every p-bit `u` and slot `s`, set `wr_en`,
   `wr_pbit = u`, `wr_slot = s` and `wr_data = beta*J`; one write per
   clock. Slot 51 (`K_MAX`) is the bias `beta*h`. Write both ends of every
   edge with the same value. Copy edges carry `beta*W0`, with W0 > 0.
   All weights reset to 0.
2. **Initial state (optional).** Pulse `load` with `load_state`. Bit `u` = 1
   means m = +1; after reset every state is -1.
3. **Run.** Pulse `start` with `num_sweeps`. `busy` stays high for exactly
   `num_sweeps * 51` cycles. `color` shows the class updating in each
   cycle, `sweep_done` marks the last cycle of each sweep, `sweep_count`
   counts the finished sweeps, and `done` pulses once at the end. A
   `start` during a run is ignored. A run of 0 sweeps ends at once.
4. **Read.** `m` always shows the 200 p-bit states. Pulse `sample` to
   merge the copies: one cycle later `spins_valid` is high, and
   `spins`, `conflict` and `n_conflicts` hold the result.
   * Copies that agree give the spin.
   * With 2 copies, a disagreement is settled by an unbiased coin flip.
   * With more copies, a majority vote settles it; a tie is again a coin
     flip.

   To read whole sweeps, raise `sample` in the cycle after `sweep_done`.
5. **Anneal.** Repeat steps 1 and 3 for each beta. The p-bit states carry
   over from run to run. The paper's schedule is beta = 0.125 to 1 in
   steps of 0.125; for J = ±1 the weights are then the integers 1..8 in
   units of 1/8.

## Timing of one p-bit

In an update cycle the following path is combinational: the neighbour
states pass through the 52-leaf adder tree (6 levels of 16-bit adders),
the table lookup and a 12-bit compare. The result is registered at the
clock edge. Neighbours see the new state one cycle later. They are of a
different colour by construction, so this is exactly sequential Gibbs
sampling in colour order.

The PRNG of a p-bit steps only when that p-bit updates. `r` is the upper
12 bits of its xorshift32 state, read as a signed fraction. The p-bit
becomes +1 when `tanh(I) > r`, so P(+1) = (1 + tanh I)/2 to within
2^-12.

The tanh table covers I in [-8, 8) in steps of 1/8, which is the weight
resolution. It holds `round(tanh(I) * 2048)`, saturated at ±2047. A
larger |I| is clamped, which changes nothing at this output width.

## What follows the source design and what does not

**Taken from the description:**

* the p-bit rule and sweep structure (Gibbs sampling with tanh and a
  uniform random number);
* the contents of a p-bit: neighbour weights, activation lookup table and
  pseudorandom generator per p-bit, with a bounded adder tree;
* k = 51 neighbours;
* 10-bit s6.3 weights that include beta;
* the 100-node, 2/3/4-copy master graphs and their degrees (51/35/27);
* copy chains with weight W0, and copy numbering after the original nodes;
* coin flip (2 copies) or majority vote (more copies) to read out;
* colouring so that each colour class updates in parallel.

**Choices made here:**

* **Which edges move to which copy.** The source moves "up to k-1" edges
  per copy without saying which; here they are contiguous, nearly equal
  chunks.
* **The colouring algorithm** (greedy).
* **One clock.** The source clocks each colour class with its own
  phase-shifted clock inside one period of a slower clock. Here a single
  clock steps through the colours. The update order is the same.
* **PRNG type and seeds** (xorshift32, a fixed seed per p-bit).
* **LUT geometry** (128 entries, 12-bit output).
* **Tie rule** of the comparator (tanh(I) = r gives -1).
* **Reset values, the host port and handshakes.**
* **Copy merging in hardware.** The source does it when it evaluates
  results.
* **Adder inputs.** The source's p-bit drawing selects either J_ij or 0
  with m_j. Here each term is +J or -J, as the update equation with
  m = ±1 requires. A host that prefers the 0/1 form can double the
  weights and shift the biases.

**Not reproduced:**

* **Sweep length.** The reported ASIC sweep time corresponds to about 4
  clock periods at ~1 GHz for every size. This design needs 51 update
  cycles per sweep for the default graph. How the source reaches 4 is not
  described.
* **PCIe host link and clock generation.** These are vendor or earlier
  IP and are left out.
* **Other configurations.** The 3- and 4-copy master graphs, the
  130-node/3-copy ASIC and the 90-node/5-copy layout are not the default
  build. They are parameter settings (`N_LOGICAL`, `COPIES`; `K_MAX` must
  be at least `ising_pkg::max_degree`). They have been simulated only at
  small sizes, which cover 2 and 3 copies.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `pbit_prng_tb` | xorshift sequence against a reference, enable, reset, uniformity |
| `tanh_lut_tb` | values against `$tanh` (±1 LSB), symmetry, monotonicity, saturation |
| `neighbor_adder_tb` | random and extreme sums, K = 51 with one unused slot, K = 3 |
| `pbit_tb` | field from programmed weights, update rule cycle by cycle, P(+1) at I = 1, hold, load |
| `color_sequencer_tb` | colour order, exactly S×colours cycles, pulses, zero-sweep run, start while busy |
| `sparse_network_tb` | graph structure (every logical edge once, chains, symmetry, degrees, proper colouring, 51/35/27); 6×2 network cycle-exact against a reference Gibbs model |
| `copy_resolver_tb` | agreement, coin flips (unbiased), majority of 3, conflict flags and count |
| `ising_top_tb` | 6×2 machine anneals random 6-node Max-Cut; cycle-exact; reaches the brute-force optimum; every mechanism counted |
| `full_adder_workload_tb` | the 5-spin full adder on a 5×2 machine at beta = 1, W0 = 1, 4, 7.5; histogram of merged states against the exact Boltzmann distribution |
| `maxcut_workload_tb` | 20-node dense Max-Cut on a 20×2 machine, W0 swept 1..12, linear beta anneal, 2000 sweeps per step; best merged cut against the exhaustive optimum |
| `ising_fullsize_tb` | default 200-p-bit machine, 100-node Max-Cut at edge density 0.75, 8 beta steps × 100 sweeps; 8.2 M state comparisons against the reference model |

The reference model (`tb/ising_ref_pkg.sv`) works on a dense J matrix.
It sums plainly over all p-bits, computes tanh in floating point, and
keeps its own random streams. It takes the wiring from `ising_pkg` only to
decide where to write each weight. A wiring error would therefore show up
as a wrong field.

**Solution quality.** In the full-size run the copies end in agreement,
but the cut is only a little above the random-cut level. A greedy local
search does better. This is the trade-off the sparsified machine is known
for:

* A copy edge strong enough to keep the copies together also makes a
  logical spin hard to flip, since both copies must move.
* A weaker edge leaves copies in conflict.

Good cuts need a tuned W0 and far more sweeps (the source uses up to
8×10⁵) than a cycle-exact RTL simulation can afford. At smaller sizes the
machine does reach the optimum:

* The 6-node machine in `ising_top_tb` finds it.
* `maxcut_workload_tb` (20 logical nodes, 40 p-bits) shows the expected
  dependence on W0. Ranges over three random problems (139, 135 and 149
  edges):

| W0 | 1–3 | 4 | 5 | 6 | 7 | 8 | 10–12 |
|---|---|---|---|---|---|---|---|
| mean copies in conflict per readout | 8.6 → 5.9 | 4.8–5.2 | 0.2–2.7 | 0.02–0.2 | 0 | ≤ 0.01 | 0 |
| best conflict-free cut / optimum | none found | none, or 0.96 | 0.98–1.0 | 0.98–1.0 | 0.92–0.98 | 0.90–0.97 | 0.87–0.94 |

  A weak copy edge leaves the copies disagreeing. A moderate one finds the
  optimum. A strong one freezes the search in worse states.

**Sampling quality.** `full_adder_workload_tb` tests the machine as a
sampler rather than as an optimiser. The full adder's five spins have
weights A–B, A–Cin, B–Cin = -1; A, B, Cin to S = +1; A, B, Cin to
Cout = +2; S–Cout = -2. The eight ground states are the truth-table rows.
The testbench compares 20,000 merged readouts at beta = 1 with the exact
distribution. The KL divergence is about 1.2 at W0 = 1, 0.09 at W0 = 4 and
2.3 at W0 = 7.5. The truth-table rows get 77% of the samples at W0 = 4,
against 81% exactly. The optimum at a moderate W0 is reproduced. The
remaining error at W0 = 4 is larger than the 10⁻² reported for the source
hardware. Likely contributors:

* the 1/8-step tanh table;
* coin-flip merging of copies that disagree;
* which copy holds which edge.

### Running with Verilator

```
verilator --binary --timing --assert -Irtl \
  rtl/ising_pkg.sv rtl/pbit_prng.sv rtl/tanh_lut.sv rtl/neighbor_adder.sv \
  rtl/pbit.sv rtl/sparse_network.sv rtl/color_sequencer.sv rtl/copy_resolver.sv \
  rtl/ising_top.sv tb/ising_ref_pkg.sv tb/ising_top_tb.sv --top-module ising_top_tb
./obj_dir/Vising_top_tb
```

Block testbenches need only the package and the modules below the block.
The full-size testbench takes about 4 minutes to build and 7 seconds to
run. It accepts `+W0=`, `+SWEEPS=` and `+NPROB=` to change the copy edge,
the sweeps per beta step and the problem size. The graph functions are
evaluated during elaboration; for 200 p-bits that adds about 30 s to
every tool run.
