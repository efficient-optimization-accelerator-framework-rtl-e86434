# A vectorized probabilistic Ising accelerator for graph coloring

Graph coloring asks for a color for every node of a graph so that no edge
joins two nodes of the same color. A probabilistic Ising machine attacks
problems like this by sampling: it holds a set of binary random neurons
("spins"), defines an energy that is zero only for a correct answer, and
repeatedly resamples one spin at a time with a probability that favours lower
energy.

The usual way to put a q-color problem on such a machine gives every node q
spins in one-hot form. That wastes spins, and it needs an extra penalty term
to keep exactly one spin per node set, which makes the energy landscape much
harder to search. This design stores each node's color as a **binary number**
instead: n = ceil(log2 q) spins per node. Two neighbours interact through a
small truth table F that is 1 when their colors clash. Every bit pattern is a
color, so no one-hot penalty term is needed. In hardware the truth table becomes
the data pattern of a wide multiplexer, so a spin update still needs no
multipliers.

The RTL here is a complete machine of this kind. It handles up to **256
nodes, all-to-all connected, with up to 16 colors**, which is 256 x 4 = 1024
spins. It updates **one spin per clock cycle**. A host programs it and reads it
through a simple memory-mapped port.

## 1. Colors as bit vectors, and the interaction F

Node i holds a color vector S_i = {s_i(n-1) ... s_i1 s_i0}. Spin s_ik is bit k
of the color number, and s_i0 is the least significant bit. The energy is

    H = sum over edges (i,j) of  W_ij * F(S_i, S_j)

    F(S_i, S_j) = 1  if S_i == S_j            (same color)
                = 1  if S_i >= Q or S_j >= Q  (bit pattern that is not a color)
                = 0  otherwise

Take Q = 3 colors on 2-bit vectors. Pattern 11 is not a color, so F sets it
apart: a node sitting on 11 pays W for every edge it has, whatever its
neighbours hold. The sampler is pushed back into the legal range without any
separate constraint term. A proper coloring with unit weights has H = 0, and
otherwise H counts the wrongly colored edges.

`f_operator` builds this table for the programmed Q. It is combinational in Q,
so the same hardware serves any color count from 1 to 16. Q only changes
between runs, so the table is static while the machine samples.

## 2. One spin update, end to end

Gibbs sampling sets spin s_ik to 1 with probability

    P(s_ik = 1) = sigmoid(-dH / T),   sigmoid(x) = 1 / (1 + e^-x),
    dH = H(s_ik = 1) - H(s_ik = 0)

All of this happens in one clock cycle, in four stages.

**Energy difference per neighbour (`vecmul`).** Only the edges of node i change
when s_ik changes. Neighbour j therefore contributes

    dH_ij = W_ij * ( F(S_i with s_ik=1, S_j) - F(S_i with s_ik=0, S_j) )

This is two multiplexers and a subtractor. Fixing s_ik to 1 in the truth
table leaves a function of the other 2n-1 bits (the rest of S_i and all of
S_j). Its 2^(2n-1) entries become the data inputs of the first multiplexer:
W_ij where the entry is 1, zero where it is 0. The second multiplexer does the
same with s_ik fixed to 0. Both are selected by the same 2n-1 state bits.
With n = 4 these are 128-input multiplexers.

The data patterns depend only on Q and k, not on the neighbour. So
`f_operator` produces them once (`mux_tt[k][v]`) and every vecmul unit shares
them. Each unit holds only its own select logic, the two W-or-0 choices and
the subtractor. The result lies in [-W, +W].

**Accumulation (`delta_h_unit`).** One vecmul per possible neighbour, 256 of
them, works on the whole weight row of node i at once. Two kinds of term are
forced to zero: the term of node i itself, and the terms of nodes at or above
the programmed node count. The sum of the rest, plus the spin's bias, is dH.
It is carried at full width and then **saturated** to a signed 8-bit value.

**Activation (`neuron_update`).** The 8-bit dH addresses a 256-entry table of
16-bit probabilities. The host fills the table, and in doing so it chooses
the temperature and the energy scale:

    LUT[a] = round( 65535 / (1 + exp( a_signed * scale / T )) )

Here a_signed is the address read as a two's-complement number. For unit edge
weights and T = 0.2 the host uses scale = 1. Address +1 (one more clash) then
gives about 440/65535, and address -1 gives about 65095/65535.

**Decision.** A 16-bit LFSR (x^16 + x^14 + x^13 + x^11 + 1, fixed seed 0xACE1)
supplies a number r in 1..65535. The new spin is `r < LUT[dH]`, and it is
written into the state register at the end of the cycle. The LFSR steps once
per update. Only one spin changes per cycle, so one generator serves all 1024
spins.

The path from the state registers through 256 vecmul units, the 256-input sum,
the table and the comparator back to the state registers is a single
combinational stage. One update per cycle requires this: the next update must
already see the new spin.

## 3. Schedule

`gibbs_sequencer` walks the spins in a fixed order:

    for sweep in 0 .. SWEEPS-1
      for node i in 0 .. N'-1          (N' = programmed node count)
        for bit k in 0 .. n-1          (n = ceil(log2 Q))
          update s_ik                  one clock cycle

So a sweep costs exactly N' x n cycles, and a run N' x n x SWEEPS cycles. Bits
at and above n are never updated. They stay 0 if the host wrote legal start
colors. `done_irq` pulses once, in the cycle after the last update. Seen from
the host, the time from the clock edge that accepts the start write to
`done_irq` is N' x n x SWEEPS + 2 cycles.

A second start continues the chain from the current colors and LFSR state, so
long runs can be split and inspected in between.

## 4. Programming the machine

The host port carries single-word accesses. With `mm_req` and `mm_we` high,
the port writes `mm_wdata` at the clock edge. With `mm_req` high and `mm_we`
low, the addressed word comes back on `mm_rdata` with `mm_rvalid` in the next
cycle. Address bits [19:16] select a region:

| region | offset | contents |
|---|---|---|
| 0 | 0 CTRL | write bit 0 = 1: start; read: {done, busy} (done is sticky until the next start) |
| 0 | 1 NODES | N', active nodes, clamped to 1..256 |
| 0 | 2 COLORS | Q, clamped to 1..16; sets n = ceil(log2 Q) |
| 0 | 3 SWEEPS | sweeps per run (0 counts as 1) |
| 0 | 4 SWEEP | read: sweeps completed |
| 0 | 5 NBITS | read: n |
| 1 | i*256 + j | weight W_ij, unsigned 8 bits |
| 2 | i*4 + k | bias of spin s_ik, signed 8 bits (0 for graph coloring) |
| 3 | a | sigmoid table entry, 16 bits |
| 4 | i | color vector of node i |

While a run is busy, every write is dropped, so the problem cannot change
under the sampler. Reads stay allowed. A run is set up in six steps:

1. Write NODES, COLORS and SWEEPS.
2. Write W_ij for all i, j < N'. The weight memory is not cleared at reset,
   but nodes beyond N' are masked, so only the active block matters. Write
   W_ij = W_ji for an undirected graph, and leave the diagonal at zero (it is
   masked anyway).
3. Write the biases of the active spins, normally zero.
4. Write the sigmoid table.
5. Write a random legal start color for each node.
6. Write CTRL = 1, wait for `done_irq` (or poll CTRL), and read the colors
   back.

## 5. Parameters and sizes

| name | default | meaning |
|---|---|---|
| `N` (top) | 256 | node capacity, all-to-all |
| `NB` (top) | 4 | bits per color vector, 16 colors; 2 to 4 (the color register is 5 bits wide) |
| `vec_pkg::WW` | 8 | weight width |
| `vec_pkg::DHW` | 8 | saturated dH width = sigmoid table address |
| `vec_pkg::LUTW` | 16 | table entry and random number width |

The weight store is N rows of N x 8 bits: 512 kbit at the default size, with
the whole row of the node being updated read every cycle. The colors (1024
bits) sit in flip-flops because all of them are read every cycle.

## 6. What follows the published design, and what is this design's own

These points follow the published accelerator:

- binary color encoding
- the F rule
- dH formed by two truth-table multiplexers and a subtractor per interaction
- 256 nodes x 16 colors, all-to-all
- 8-bit accumulated dH
- a 256 x 16-bit sigmoid table
- a 16-bit LFSR with fixed seed and the comparison `r < P`
- single-flip Gibbs order, one update per clock
- a memory-mapped host interface

These are choices of this design, where the published description is silent:

- 8-bit unsigned weights
- saturation of the dH sum, rather than wrap-around
- per-spin signed biases
- the table computed from a Q register rather than fixed per problem
- masking of unused nodes
- a host-writable sigmoid table (so temperature is software's choice)
- a single shared LFSR, its polynomial and seed
- the bit order within a node's update
- the address map, 32-bit host data, one-cycle read latency
- dropping of writes while busy

Not included:

- **Parallel tempering.** The published work runs it on GPUs only, as 100
  replicas swapped every 15 sweeps. The accelerator runs one chain. A host
  can emulate replicas by reloading colors and the sigmoid table between
  runs, but no swap hardware exists.
- **The PCIe link.** It is third-party IP. Its memory-mapped side is the
  `mm_*` port of `vec_ising_top`.
- **The traveling-salesman mapping.** It uses a different F (values 1, -1,
  -2 with problem-dependent penalties) and is not built.
- **The one-hot baseline.** It is not built.

The published description uses two sign conventions for the sigmoid. This
design follows the one under which the machine minimises energy:
P(s=1) = 1/(1 + e^(dH/T)). Because the table is written by software, the
hardware does not fix the convention anyway.

## 7. How it has been checked

Every module has a self-checking testbench in `tb/`. Each one compares the
module with values worked out independently. For example, the dH checks
compute two full node energies and subtract them instead of modelling the
multiplexers.

The end-to-end tests drive the top level through `host_bus_if` (a testbench
interface with write and read tasks). They compare against
`tb_ref_pkg::ref_machine`, a cycle-level model that uses the same update order
and the same LFSR numbers. Every color read back must match the model exactly,
and every run's cycle count must match the formula in section 3.

- `vec_ising_top_tb` runs at the full default size in about a second:
  - a dense random 256-node, 16-color problem that drives dH into saturation
    at both ends, with a write attempted while busy;
  - myciel3 (11 nodes, 4 colors), run in two parts;
  - queen5_5 (25 nodes, 5 colors, so illegal colors 5..7 occur).
- `coloring_workloads_tb` generates the Mycielski and queen benchmark graphs
  from their definitions and runs each for 1000 sweeps at T = 0.2 with unit
  weights. It takes about 40 s. Wrongly colored edges after one run from the
  fixed seed, next to the best of 200 runs reported for the FPGA
  implementation:

| graph | nodes | edges | colors | spins | one run | reported |
|---|---|---|---|---|---|---|
| myciel3 | 11 | 20 | 4 | 22 | 0 | 0 |
| myciel4 | 23 | 71 | 5 | 69 | 0 | 0 |
| myciel5 | 47 | 236 | 6 | 141 | 0 | 0 |
| myciel6 | 95 | 755 | 7 | 285 | 0 | 0 |
| myciel7 | 191 | 2360 | 8 | 573 | 2 | 0 |
| queen5_5 | 25 | 160 | 5 | 75 | 0 | 0 |
| queen6_6 | 36 | 290 | 7 | 108 | 2 | 1 |
| queen7_7 | 49 | 476 | 7 | 147 | 0 | 5 |
| queen8_8 | 64 | 728 | 9 | 256 | 6 | 2 |
| queen9_9 | 81 | 1056 | 10 | 324 | 8 | 4 |
| queen8_12 | 96 | 1368 | 12 | 384 | 4 | 2 |
| queen11_11 | 121 | 1980 | 11 | 484 | 22 | 18 |
| queen13_13 | 169 | 3328 | 13 | 676 | 31 | 26 |

A single chain landing near the best of 200 is the expected behaviour. The
book graphs (anna, david, huck) also fit the machine, but their edge lists
are not generated here. The citation graphs (2708 to 19717 nodes) exceed the
256-node capacity.

What is not verified:

- timing closure at the 90 MHz the published FPGA build reached;
- power;
- any behaviour of the PCIe link.

## 8. Simulating

The packages go first on the command line; the other modules are found by
name in `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module vec_ising_top_tb \
        rtl/vec_pkg.sv tb/tb_ref_pkg.sv -y rtl -y tb tb/vec_ising_top_tb.sv
    ./obj_dir/Vvec_ising_top_tb

Replace the top name with any other testbench (`coloring_workloads_tb`,
`vecmul_tb`, ...). Each testbench ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. To change the machine
size, override `N` and `NB` on `vec_ising_top`, or the widths in `vec_pkg`.
The testbenches of the submodules already run reduced sizes, such as a 16-node
`delta_h_unit`.

## 9. Files

| file | role |
|---|---|
| `rtl/vec_pkg.sv` | sizes, address map, configuration struct, ceil(log2 Q) |
| `rtl/f_operator.sv` | F truth table and the multiplexer data patterns |
| `rtl/vecmul.sv` | one neighbour's dH: two multiplexers and a subtractor |
| `rtl/delta_h_unit.sv` | 256 vecmul units, masking, sum, saturation |
| `rtl/neuron_update.sv` | sigmoid table, LFSR, comparator |
| `rtl/lfsr16.sv` | 16-bit LFSR |
| `rtl/weight_bias_mem.sv` | weight rows and biases |
| `rtl/neuron_states.sv` | color registers |
| `rtl/gibbs_sequencer.sv` | update order, run control |
| `rtl/mmio_ctrl.sv` | host registers, address decoding, read path |
| `rtl/vec_ising_top.sv` | the machine |
| `tb/tb_ref_pkg.sv` | reference F, energies, LFSR, sigmoid, graph generators, `ref_machine` |
| `tb/host_bus_if.sv` | host port with access tasks |
| `tb/*_tb.sv` | one testbench per module, plus `coloring_workloads_tb` |
