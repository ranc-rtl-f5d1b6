# RANC in SystemVerilog: a mesh of time-multiplexed spiking-neuron cores

RANC ("Reconfigurable Architecture for Neuromorphic Computing", Mack, Purdy et
al.) is a neuromorphic fabric built from many identical cores. Each core has
N(a) input axons and N(n) leaky-integrate-and-fire (LIF) neurons joined by a
binary crossbar. Spikes travel between cores as small packets. Each packet
names its destination core relative to the sender, the axon it should reach,
and how many ticks later it should take effect. Everything advances on one
global, slow *tick*. Between two ticks each core walks through its whole
crossbar with a single neuron datapath, one synapse per clock cycle.

Everything is a parameter: crossbar size, number of weights per neuron, bit
widths, delay slots and mesh size. With the default numbers (256 × 256
crossbar, 4 signed 9-bit weights per neuron, 9-bit potentials, 16 delay slots)
a core behaves like an IBM TrueNorth core. There is one deliberate difference:
the negative threshold is symmetric (`<=` rather than `<`).

This repository holds synthesizable RTL for the core and the mesh, plus
self-checking testbenches. The description below is enough to use and modify
the RTL without the paper. Where the RTL goes beyond what the paper
specifies, the text says so.

## 1. One tick, seen from a core

A core is five blocks (`rtl/ranc_core.sv`):

```
           tick                                   mesh links (E, W, N, S)
            |                                             ^  |
   +--------v---------+   word j    +-------------+       |  v
   | core_controller  |<----------->|  core_sram  |   +---+--+---------+
   |  (8-state FSM)   |  read/write |  N(n) words |   | packet_router  |
   +--+----------+----+             +------+------+   |  XY, FIFOs     |
      | axon i,  | spike_valid             | fields   +---+--------^---+
      | controls |                         v              |        |
      |     +----v----------------+  weights, v(t-1),      | local  | spike packet
      +---->|    neuron_block     |<-thresholds, resets    v        | (dest. fields)
            |  NP += w[tau_i] ... |             +-----------------+ |
            +----------+----------+             | packet_scheduler| |
                       | v_j(t), spike          |  N(t) x N(a)    | |
                       +------------------------+-----------------+-+
```

When the tick arrives, the controller moves the scheduler to the next time
slot. That slot is an N(a)-bit vector of the axons that carry a spike in this
tick. The controller then processes neurons j = 0 … N(n)−1 in order:

1. It reads neuron j's word from the core SRAM (one read per neuron per
   tick). The word holds everything about the neuron: its crossbar column,
   potential, weights, leak, thresholds, resets and spike destination.
2. It steps through axons i = 0 … N(a)−1, one per cycle. When axon i has a
   spike *and* crossbar bit (i, j) is set, the neuron block adds weight
   w_j[τ_i] to its running potential NP. τ_i is the axon's type.
3. The neuron block adds the leak, compares with the two thresholds and
   produces v_j(t) and the spike bit. The controller writes the word back with
   the new potential (one write per neuron per tick). If the neuron spiked,
   it hands the word's destination fields to the router as a packet.

After the last neuron, the consumed time slot is cleared and the core goes
idle until the next tick. A tick that arrives while the core is still busy
sets the sticky `tick_error` flag: the tick rate is too high for the crossbar
size.

**Cost.** One tick keeps a core busy for N(n)·(N(a)+3)+2 cycles, which is
66,306 cycles at 256 × 256. The paper quotes 66,308 for its implementation.
Every axon is visited whether or not it carries a spike, so the time does not
depend on activity. The maximum tick rate is f_clk / 66,306: about 3 kHz at
200 MHz.

## 2. The neuron datapath (`neuron_block`)

One datapath is shared by all neurons of a core. A register NP accumulates:

```
NP <= (new_neuron ? v_j(t-1) : NP) + (process_spike ? w_j[tau_i] : 0)     (while nb_en)
L   = NP + leak_j
if      L >= v+_j : spike;    v_j(t) = reset_mode ? L - r+_j : r+_j
else if L <= v-_j : no spike; v_j(t) = reset_mode ? L + r-_j : r-_j
else              : v_j(t) = L
```

- `new_neuron` is high on a neuron's first axon, so NP starts from the
  stored potential.
- All additions saturate at the B(v)-bit signed range.
- The output side is combinational on NP. v_j(t) and the spike are valid the
  cycle after the last axon.

The structure follows the paper's neuron-block diagram:

- a weight multiplexer selected by τ_i;
- a zero multiplexer controlled by `process_spike`;
- a multiplexer choosing v(t−1) or NP;
- the NP register;
- the leak adder;
- two comparators and two reset multiplexers.

Four points are decisions made here:

- **The leak is always added, before the threshold comparison.** The paper's
  prose says a neuron leaks only if it crosses neither threshold. Its
  datapath diagram, and TrueNorth, add the leak on every tick. This design
  follows the diagram.
- **The thresholds are symmetric.** A spike needs `L >= v+`, and the negative
  reset needs `L <= v-`. This is RANC's change from TrueNorth's `<` on the
  negative side. It lets signed vector-matrix products run without TrueNorth's
  feedback neurons.
- **Linear reset uses the reset values as the step.** A spiking neuron
  subtracts r+ and a neuron below the negative threshold adds r−. One
  `reset_mode` bit per neuron selects absolute or linear reset for both
  sides.
- **τ_i = i mod N(w).** The paper says each axon has a hard-wired type index
  but does not give the mapping. With N(w) = 4, axons 0, 4, 8, … use weight
  0, axons 1, 5, 9, … use weight 1, and so on. A network mapped onto this
  design must place its axons accordingly.

## 3. The neuron word (`core_sram`)

The core SRAM is a simple dual-port memory of N(n) words. It has one
synchronous read port, with data one cycle after the address, and one write
port. A read and a write to the same address return the old word. The
paper lists the contents of a word but not their order. This design packs
them as follows, most significant field first:

| field        | width            | meaning                                   |
|--------------|------------------|-------------------------------------------|
| synapses     | N(a)             | bit i = axon i connects to this neuron    |
| potential    | B(v) signed      | v_j(t−1), rewritten every tick            |
| pos_reset    | B(v) signed      | r+ (absolute value or linear step)        |
| neg_reset    | B(v) signed      | r−                                        |
| weights      | N(w) × B(w)      | weight k in bits [k·B(w) +: B(w)]         |
| leak         | B(l) signed      | added every tick                          |
| pos_thresh   | B(v) signed      | v+                                        |
| neg_thresh   | B(v) signed      | v−                                        |
| reset_mode   | 1                | 0 absolute, 1 linear                      |
| dx, dy       | 9 + 9 signed     | destination core, relative                |
| axon         | log2 N(a)        | destination axon                          |
| tick         | log2 N(t)        | delivery delay in ticks, 1 … N(t)−1       |

The default word is 377 bits. The low 30 bits (dx, dy, axon, tick) are the
exact packet the core emits when the neuron spikes.

An all-zero word is *not* a silent neuron: v+ = 0 makes it fire every tick.
Every neuron, used or not, must therefore be configured. For a silent neuron, write
v+ = 255 and leak 0.

Words are loaded through the configuration port (`cfg_we`, `cfg_addr`,
`cfg_data`, and at mesh level `cfg_x`, `cfg_y`). Alternatively the
`INIT_FILE` parameter of `ranc_core` preloads a core from a hex file. Write
configuration only while the mesh is idle: the controller's write-back has
priority, and an assertion flags a configuration write during a tick. The
paper loads configurations over AXI4, with a format it does not publish.

## 4. The controller (`core_controller`)

The FSM has eight states, numbered as in the paper's controller figure. The
actions in each state are this design's reading of the text.

| state | action                                                                 | cycles        |
|-------|------------------------------------------------------------------------|---------------|
| 0     | idle, wait for the tick                                                |               |
| 1     | advance the scheduler slot; neuron index ← 0                           | 1             |
| 2     | read neuron j's word (data arrives next cycle)                         | 1 per neuron  |
| 3     | axon 0: NP ← v(t−1) (+ weight)                                         | 1 per neuron  |
| 4     | axons 1 … N(a)−1                                                       | N(a)−1        |
| 5     | write the word back; `spike_valid` if the neuron fired                 | 1 per neuron  |
| 6     | next neuron (→ 2) or, after the last, → 7                              | 1 per neuron  |
| 7     | clear the slot just consumed                                           | 1             |

`process_spike = synapses[i] & axon_spikes[i]` while in states 3 and 4.

The paper's controller figure labels state 7 "clear row in CSRAM that was
just read". Clearing a neuron word would erase its configuration, so this
design reads that row as the scheduler row of the tick just processed.
Without this clear, a slot would replay its spikes N(t) ticks later.

## 5. Delayed delivery (`packet_scheduler`)

The scheduler is an N(t) × N(a) bit memory with a B(t)-bit "current slot"
counter. A packet that reaches its destination core carries (axon, delay). It
sets bit `axon` of slot `(current + delay) mod N(t)`. The current slot is what
the controller reads as this tick's axon spikes.

A packet whose target is the current slot, which is any delay of 0, has
arrived too late. It is dropped and `sched_error` pulses, and operation
continues. Usable delays are therefore 1 … 15 ticks at N(t) = 16.

The paper's scheduler figure feeds the offset and the counter straight into
the "=" comparator and shows no adder. Its text, however, defines the offset
as relative to the current tick. This design follows the text: it adds
first, then compares.

All cores advance their counters in the same cycle after a tick, so a delay
of d means "processed d ticks after the tick that produced it" anywhere in
the mesh, provided the packet arrives before the next tick.

## 6. Packets and the mesh (`packet_router`, `ranc_grid`)

A packet is `{dx, dy, axon, tick}`, 30 bits at the defaults. The router uses
dimension-order routing and moves one hop at a time:

```
dx > 0  -> east,  dx-1          dx < 0 -> west,  dx+1
dx = 0, dy > 0 -> north, dy-1   dy < 0 -> south, dy+1
dx = dy = 0    -> this core's scheduler
```

East and north are positive, as the paper's prose states. The paper's routing
pseudo-code sends dx < 0 to the east. Because the two disagree, this design
follows the prose.

**Buffers and back-pressure.** Each router has:

- one FIFO per output (E, W, N, S, local);
- one FIFO for spikes produced by its own neurons.

The FIFOs are 4 entries deep by default. The receiving core drives the read
enable of the sender's output FIFO, which is the paper's back-pressure
scheme. A router takes a packet from an input only when the FIFO of that
packet's output has room. A full FIFO therefore stops its senders, and the
stall spreads backwards through the mesh. Each output takes at most one
packet per cycle. Inputs that compete for an output are served round-robin.

**Overflow.** The controller never waits. If a neuron spikes while its own
router's input FIFO is full, the spike is lost and `local_overflow` pulses.
This happens only when the mesh is congested for longer than the spacing
between spikes of one core, which is N(a)+3 cycles. The paper does not
describe this case.

**The mesh.** `ranc_grid` is a DIM_X × DIM_Y array of cores (default 4 × 4).
Core (x, y) has x growing to the east and y to the north. Links that leave
the array are brought out as ports:

- `edge_in_*[side][k]` and `edge_out_*[side][k]`;
- `side` is E, W, N or S (`ranc_pkg::dir_t`);
- `k` is the row (for E and W) or the column (for N and S).

A host feeds input spikes into an edge core exactly as a neighbour core
would: `edge_in_ren` pops its source. It collects output spikes with
`edge_out_ren`. For example, a packet `{dx = x, dy = 0, axon, delay}` on the
west edge of row y reaches core (x, y). A spike sent further than the mesh
extends leaves at the edge, carrying whatever offset remains. The per-core
status flags are `core_busy`, `tick_error`, `sched_error` and
`local_overflow`, each indexed by y·DIM_X + x.

## 7. Parameters

| parameter     | default | meaning                              | origin                      |
|---------------|---------|--------------------------------------|-----------------------------|
| NUM_AXONS     | 256     | N(a)                                 | paper (TrueNorth config)    |
| NUM_NEURONS   | 256     | N(n)                                 | paper                       |
| NUM_WEIGHTS   | 4       | N(w)                                 | paper                       |
| WEIGHT_W      | 9       | B(w)                                 | paper                       |
| POT_W         | 9       | B(v), thresholds and resets too      | paper                       |
| LEAK_W        | 9       | B(l)                                 | paper                       |
| NUM_TICKS     | 16      | N(t), delay slots                    | paper (16-tick offsets)     |
| DX_W, DY_W    | 9       | signed offset width                  | paper (256-core reach)      |
| FIFO_DEPTH    | 4       | router FIFO entries                  | this design                 |
| DIM_X, DIM_Y  | 4       | mesh size                            | this design                 |

N(a), N(n) and N(t) need not be powers of two. Every core in a mesh has the
same size. The paper also studies meshes that mix core sizes, for example
1024-axon convolution cores next to 256-axon ones. That needs a per-core
parameter array and is not built here.

## 8. Files

- `rtl/ranc_pkg.sv`: shared constants, the controller state enum, the
  direction enum and saturation limits.
- `rtl/neuron_block.sv`, `rtl/core_controller.sv`, `rtl/core_sram.sv`,
  `rtl/packet_scheduler.sv`, `rtl/packet_router.sv`: the core's blocks.
- `rtl/packet_fifo.sv`: the FIFO used by the router.
- `rtl/ranc_core.sv`: one core. It also defines the word layout.
- `rtl/ranc_grid.sv`: the top-level mesh.

## 9. Verification and how to simulate

Each testbench prints `TB_RESULT checks=N failures=M` and ends. It compares
the RTL with an independent model written in the testbench. It also has a
watchdog that counts a failure if the simulation hangs. To run one with
Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/ranc_pkg.sv tb/ranc_grid_tb.sv \
          --top-module ranc_grid_tb -o sim && ./obj_dir/sim
```

| testbench             | what it establishes |
|-----------------------|---------------------|
| `neuron_block_tb`     | Replays the paper's two worked VMM neurons tick by tick. One is a binary neuron of the first core. The other is the [8,4,2,1] neuron of the second core, with potentials 14, 18, 22, then 21. It checks the `<=` negative threshold and compares 3,000 random neurons with a model that covers saturation, both reset modes and leak. |
| `core_controller_tb`  | Checks every state and control signal of an 8 × 4 controller cycle by cycle. It checks the busy time at 8 × 4 and at 256 × 256 (66,306 cycles), and the early-tick error. |
| `core_sram_tb`        | 20,000 random reads and writes, including read-during-write. |
| `packet_scheduler_tb` | A directed test, then 20,000 random cycles against a model: wrap-around, late packets and slot clearing. |
| `packet_router_tb`    | Random traffic on all five inputs with random back-pressure. A scoreboard checks each (input, output) pair: correct port, decremented offsets, order kept per pair, no loss or duplication, and overflow only when the local FIFO is full. |
| `ranc_core_tb`        | One 16 × 8 core over 40 ticks, with random neurons, injected packets, self-loops, exported spikes and late packets. It checks every potential, every output packet, the late-packet count and the busy time. |
| `ranc_grid_tb`        | End-to-end test of a 3 × 2 mesh of 8 × 8 cores over 30 ticks against a model of the whole mesh. It counts each mechanism and fails any that never occurred: spikes, self-loops, multi-hop routes, edge exits, edge injection, stalls at the edge and inside the mesh, late packets, local overflow and tick error. A second phase blocks an edge and checks that every spike either leaves or is reported lost. |
| `ranc_grid_full_tb`   | The mesh at its default size (4 × 4 cores of 256 × 256) for five complete ticks. Each row relays injected spikes eastward, one core per tick; exactly the injected set must leave the east edge after four ticks. It also checks 66,306 busy cycles per tick. This takes a few seconds. |
| `vmm_example_tb`      | The paper's two-core positive vector-matrix product, [1,3,2,1]·[2,1,4,12], at the default size. It runs 28 ticks and checks the potentials tick by tick. The second core emits 25 spikes, one per tick from tick 2 to tick 26. This takes about 20 s. |

For each block, a copy with one deliberate bug was run against that block's
testbench, and the testbench caught every bug. The bugs were: `>` for `>=`,
a wrong scheduler slot, a crossbar bit ignored, a write-first RAM, east and
west swapped, threshold fields swapped, and back-pressure ignored on one link
direction.

The simulations use two-state logic, so everything that is read is reset or
initialised. Every register that holds control state has a synchronous,
active-low reset. The memories (core SRAM and scheduler) are cleared at time
zero or by reset.

## 10. Capacity at the default size

The default mesh holds 16 cores, that is 4,096 neurons and 1,048,576
synapses.

| workload from the paper                              | needs                 | fits here |
|------------------------------------------------------|-----------------------|-----------|
| MNIST, 9-core network                                | 9 cores of 256×256    | yes       |
| MNIST, 30-core network                               | 30 cores              | no (16); a 6 × 5 mesh would |
| EEG (same topology as MNIST)                         | 9 or 30 cores         | depends on which |
| signed 8×8 VMM, symmetric thresholds                 | 3 cores, 192 axons, 176 neurons | yes |
| positive VMM example                                 | 2 cores               | yes (simulated) |
| SAR, default configuration                           | 489 cores             | no        |
| SAR / CIFAR-10, modified configuration               | 1024-axon cores, 9 / 23 cores | no (uniform 256×256 cores) |
| CIFAR-10, default configuration                      | 364 cores             | no        |

The mesh size is a parameter, so larger meshes are a matter of DIM_X and
DIM_Y. The default packet offsets reach ±256 cores in each direction.

## 11. What is not here

- **The host interface.** The FPGA version wraps the mesh in an AXI4 kernel.
  Its register map and spike packing are not published, so the edge packet
  streams are left as ports.
- **Stochastic neuron modes.** RANC does not implement them.
- **Mixed core sizes within one mesh.**
- **The training flow and software simulator.** These are software and are
  not part of the hardware.
