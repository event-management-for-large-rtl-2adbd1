# An event-driven spiking neural network built around a structured heap queue

A spiking neural network simulated event by event only does work when a neuron
fires. The cost moves into one place: the **event queue**, which must say at
every moment which neuron fires next, and which must be updated each time an
event changes a neuron's predicted firing time. In hardware that queue usually
limits the network: a sorted list or a scan over all neurons gets slower as the
network grows.

This design is a structured heap queue (SHQ), a pipelined binary heap in which
the position of every element is fixed by its ID. This gives:

* The earliest firing time is always in the root register.
* Removing or replacing any neuron's entry costs a fixed number of cycles,
  however many neurons there are.
* The logic grows with the number of tree levels.
* The memory grows linearly with the number of neurons.

Around the queue sits a small neural engine that does image segmentation with
a grid of leaky integrate-and-fire (LIF) neurons, one neuron per pixel:

* a **controller** that runs the event loop and talks to a host;
* a five-stage **processing element** that turns one spike into new firing
  times for the nine neurons it touches;
* a **merger** that picks the earliest root when there are several queues.

At the default size the network has 65 536 neurons (a 256 × 256 image) and a
17-level queue. It processes one involved neuron every 7 clock cycles, and one
event (nine neurons) in 68 cycles.

## How the network computes

Each neuron is a free-running LIF oscillator. Its potential follows

  p(s) = (I0/τ)(1 − e^(−s/τ))

It fires and is reset when p reaches the threshold, so unperturbed it fires
with period T. The neuron's potential is not stored. Each neuron is kept as its
**predicted firing time** `ft`; the potential at simulation time `t` follows
from the phase `ft − t` alone. A spike from neuron *i* is handled like this:

1. Set the simulation time to *i*'s firing time.
2. For each of the nine involved neurons (the eight grid neighbours and *i*
   itself):
   1. look up the potential now: `p = M[ft − t]`;
   2. add the synaptic weight `W[pixel_i − pixel_j]`, or, for *i* itself,
      subtract the threshold;
   3. look up how long the new potential needs to reach the threshold:
      `ft' = t + Minv[p]`;
   4. write `ft'` back and update the neuron's entry in the queue.

Neighbours with similar grey levels excite each other strongly and fall into
step; the groups of neurons firing together are the image's segments.

Everything model-specific lives in four tables that the host loads:

| table | entries | content |
|---|---|---|
| topology | 9 | neuron-ID offsets |
| weight | 512 | weight for each 9-bit pixel difference |
| membrane | 8192 | potential for each 13-bit phase |
| inverse membrane | 8192 | time left until firing for each 13-bit potential |

The threshold register completes the set. The hardware itself fixes only the
data widths:

* firing times and potentials: 13 bits;
* pixels: 8 bits;
* weights: 9 bits;
* neuron IDs: 16 bits.

### Time is circular

Firing times are 13-bit numbers that wrap. Time *a* counts as earlier than *b*
when bit 12 of `a − b` is set (`hsnn_pkg::time_before`). This holds as long as
every pending firing time lies less than 4096 units from every other.

In the LIF model a neuron's next firing lies at most one period ahead of the
simulation time. The condition therefore holds if the tables map one period to
fewer than 4096 units; the testbenches use 4000.

Runs longer than 8192 units are counted in a separate 32-bit elapsed-time
register in the controller.

## The structured heap queue (`shq_event_queue`, `shq_level`)

### Paths

The queue is a binary tree of L levels. Level k (k = 1 is the root) has
2^(k−1) nodes, and each node holds one element:

* ID: 16 bits;
* firing time: 13 bits;
* pixel: 8 bits;
* valid bit.

An element may only live on the **path** fixed by its ID: at level k it can
only be in node `id >> (L − k)`. Read the ID from its top bit down to choose
left or right at each level.

The heap rule holds along every path: a node's time is never later than its
children's. So the root holds the earliest element, and the element with a
given ID can be found by walking one path. No search is needed.

### The memory-optimised last level

A full tree of L levels has 2^L − 1 nodes for 2^(L−1) IDs. The last level is
half the tree, yet at most a quarter of its nodes can be occupied at once.

So the last level is cut to 2^(L−3) nodes:

* Leaf `id >> 2` is shared by four IDs.
* It has two parents at level L−1.
* A parent sees the leaf as its child only when the leaf's element lies on its
  path (`leaf.id >> 1 == parent`).
* A parent whose partner owns the leaf's element treats the leaf as empty.

The 17-level queue thus holds 65 536 elements in 1.25 × 65 536 nodes. Capacity
is guaranteed as long as IDs are unique: the four-ID subtree below a
level-(L−2) node has exactly four nodes.

An insert that reaches a full last level sets the sticky `overflow` flag. An
assertion also fires.

### One level is one pipeline stage

Each level (`shq_level`) owns:

* its slice of the tree;
* one delete token and one insert token;
* one comparator.

An operation spends three cycles on each level:

* **R**: read;
* **C**: compare and decide;
* **W**: write back.

It then passes a token to the next level down. Several operations move down
the tree at the same time, each on a different level, as in a pipelined heap.

Reads are synchronous, as in block RAM. Middle levels store even and odd nodes
in separate arrays, so that a delete on the level above can read both children
of a node in one cycle.

**Delete (remove the element with ID x).** The token first *locates* x along
its path. In R it reads its own node. It also asks the level below for the two
children of that node through the `cr_*` port, which the level below serves
from its own arrays.

In C there are two cases:

* **The node holds x:** the earlier child is written into the node, and the
  token becomes a *promote* token on that child's node.
* **It does not:** the token moves on along x's path.

A promote token stands on a hole and does the same thing one level further
down. It stops when both children are empty: the node is written empty.

**Insert.** The token carries an element down its path. In R it reads the node
on the path. In C:

* **Empty node:** the element settles and the insert ends.
* **Occupied node:** the earlier of the two elements stays and the later one is
  carried on.

**Delete-insert.** This is the operation the network uses: "neuron x now fires
at time t'". It is a delete of x followed one cycle later by an insert of the
new element.

On every level the insert's C falls in the delete's W cycle. When both work on
the same node, the delete's write data is forwarded into the insert's compare.
The insert then sees the element the delete just promoted, not the stale memory
word.

### Issue rules

All operations enter at the root, counted from the cycle they enter level 1:

* an insert may follow an insert or a delete after **3 cycles**;
* a delete may follow any operation after **6 cycles**.

With these spacings no two operations use a level's read port or write port in
the same cycle. Per level the order is always delete, then insert.
`shq_level` asserts both rules.

A delete-insert therefore occupies the queue for **7 cycles**, and an insert
for 3. Neither figure depends on L. `op_ready` applies the rules.

The root is correct 3 cycles after an insert and 4 cycles after a
delete-insert, long before the operation has reached the leaves.
`top_settled` tells the consumer that no operation is working on level 1.

After reset every level sweeps its memory empty, one node per cycle
(2^(L−2) cycles). `op_ready` stays low until the sweep is done.

## The processing element (`processing_element`)

Five stages of one cycle each. A new involved neuron can enter every cycle.

| stage | module | work |
|---|---|---|
| 1 | `topology_solver` | `post = (pre + offset[s]) mod N`, flag `same` when the offset is 0 |
| 2 | `neuron_state_memory` | read the post neuron's firing time and pixel |
| 3 | `membrane_model`, `weight_calculator` | `p = M[ft − t]`, `w = W[pixel_pre − pixel_post]` |
| 4 | `synapse_model`, `inverse_membrane_model` | `p' = sat(p + w)` or `sat(p − threshold)`; read `Minv[p']` |
| 5 | `inverse_membrane_model` | `ft' = Minv[p'] + t`; write back; send a delete-insert `{post, ft', pixel_post}` |

The queue element carries the pixel. When the element reaches the root, the
controller therefore has the firing neuron's pixel without another memory
read.

The PE output is valid 4 cycles after issue. Because the controller issues 7
cycles apart, each output meets a ready queue; `hsnn_top` asserts this.

A **probe** takes the same path through stages 1–4 without writing anything.
It returns the neuron's firing time, pixel and present potential for
read-back.

The host reaches the four tables, the threshold and the neuron state through
the `cfg_*` port.

## The controller (`controller`) and the host port

The event loop works like this:

1. Wait until the root has settled and the PE has drained.
2. Take the merger's output as the next event.
3. Advance the simulation time to the event's firing time, and add the
   wrap-around difference to `elapsed`.
4. Issue synapse numbers 0..8, one every 7 cycles.

One event costs 63 cycles of issue plus 5 of drain. Draining makes sure the
last neuron's new firing time is in memory before the next event can read it.

A run stops in either of two cases:

* the next event would pass the requested run time;
* the queue is empty.

The host protocol is a command port with `h_valid`/`h_ready`; the commands are
in `hsnn_pkg::hcmd_e`:

| command | address | data | action |
|---|---|---|---|
| `H_WR_TOPO`, `H_WR_WEIGHT`, `H_WR_MEMB`, `H_WR_INVMEMB` | entry | value | write a table |
| `H_WR_THRESH` | – | threshold | set the threshold |
| `H_INIT_NRN` | neuron | `{pixel, ftime}` | store the neuron and insert it into the queue (one per 3 cycles) |
| `H_RUN` | – | run time in firing-time units | run; `running` stays high until the stop |
| `H_READ_NRN` | neuron | – | probe; `r_valid` with `r_ftime`, `r_pixel`, `r_potential` |

Commands are accepted only while no run is in progress. The counters `events`
and `elapsed`, and the current `sim_time`, are outputs.

## The merger (`merger`)

With several processing elements, each would have its own queue, and the
merger would pick the earliest root with a linear minimum search. Ties go to
the lowest index, and the output is registered.

The system as built has one PE and one queue (`N_QUEUES = 1`). The merger then
only re-times the root and ANDs the `settled` flags.

## Sizes

| parameter | default | where |
|---|---|---|
| `LEVELS` | 17 (65 536 neurons) | `hsnn_top`, `shq_event_queue` |
| `N_NEURONS` | 2^(LEVELS−1) | `hsnn_top`, `processing_element` |
| `THRESHOLD` | 4096 (reset value of the threshold register) | `hsnn_top` |
| `N_SYN` | 9 | `hsnn_pkg` |

At the default size the memories hold 4.7 Mbit:

| memory | size |
|---|---|
| queue | 81 919 nodes × 38 bits |
| neuron state | 65 536 × 21 bits |
| membrane tables | two, 8192 × 13 bits each |
| weight table | 512 × 9 bits |

The 65 536 neurons hold the 406 × 158 = 64 148 pixel image of the original segmentation experiment.
With the row offsets ±405, ±406, ±407 loaded into the topology table, it runs
as a 406-wide grid. Eight synapses per neuron are implicit in the topology
table; no per-synapse storage exists.

A 200 ms run of the segmentation task means:

* period T = −τ ln(1 − τ/I0) ≈ 3.06 ms with I0 = 6.918 and τ = 0.1447;
* about 65 periods, so about 4.2 million events;
* at 68 cycles per event, about 2.9 s at 100 MHz.

## Where this design departs from, or fills in, the source description

* **Reset by the threshold.** The drawing of the synapse model shows the
  threshold entering an adder; the text says it is subtracted. It is
  subtracted. The sum saturates to 0..8191, a rule of this design.
* **Pixel in the queue element.** This follows the system drawing, whose queue
  outputs include the top element's pixel value.
* **Weight source.** The description says the PE receives "a weight parameter"
  from the controller. Here the PE computes the weight from its own table; the
  controller sends the firing neuron's pixel.
* **Grid borders.** Neighbour IDs wrap modulo the neuron count. Border pixels
  are therefore connected to the opposite edge; no border rule is given.
* **This design's own choices:**
  - the wrap-around time compare and the elapsed-time register;
  - the run-stop rule;
  - the host command set;
  - the probe path;
  - the queue handshake (`op_ready`, `top_settled`);
  - the delete-to-insert forwarding;
  - the clearing sweep after reset.
* **Not built.** The host's communication link is not built. Its function is
  the `h_*` port, which a bus or serial bridge would drive.
* **Single PE.** Several PEs with one queue each, combined by the merger, are
  possible. Only the merger is parameterised for it.
* **Memories.** They are written as plain arrays with synchronous reads, in
  place of FPGA block RAMs.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and stops itself after a fixed time if it
hangs.

| testbench | what it checks |
|---|---|
| `tb_shq_event_queue` | 5-level queue against an array model: root after each burst, drain order, inserts accepted every 3 cycles, delete-inserts every 7 |
| `tb_topology_solver`, `tb_neuron_state_memory`, `tb_weight_calculator`, `tb_membrane_model`, `tb_synapse_model`, `tb_inverse_membrane_model` | each stage against its formula with random tables and inputs |
| `tb_processing_element` | 256 neurons with random tables against a reference model, 4-cycle latency, probes |
| `tb_merger` | 4 queues, earliest root and tie rule |
| `tb_controller` | loop, issue spacing, run-time stop and host commands, with the PE and queue modelled |
| `tb_hsnn_top` | whole system, 9-level queue (256 neurons, 16 × 16 image), 25 periods, about 8 000 events |
| `tb_hsnn_top_full` | whole system at the default size: 65 536 neurons, 3 periods, about 264 000 events, under a minute of simulation |

The two system tests generate the segmentation tables in SystemVerilog. They
use the parameters I0 = 6.918, τ = 0.1447, threshold 1 → 4096 units and one
period → 4000 units. The weights follow
w = w_max(1 − 1/(1 + e^(−α(|d| − δ)))) with w_max = 0.0325, α = 100 and δ = 6:

* neighbours whose grey levels differ by less than 6 get about w_max (133
  potential units);
* all others get about 0.

The source prints the exponent with |d| + δ, which would make every weight
vanish. The minus sign is this testbench's reading.

The image is synthetic (four flat regions with noise), and initial firing
times are random.

A reference model follows each event as it happens:

* the processed neuron must be the model's earliest (checked over all neurons);
* its time and pixel must match;
* the model applies the same arithmetic to the nine neurons.

At the end every neuron (every 64th at full size) is read back. Its firing
time, pixel and potential must match the model.

Each mechanism must happen at least once:

* resets;
* neurons pushed over the threshold by a neighbour;
* events at the same time (synchrony);
* wraps of the 13-bit time;
* delete-inserts and inserts;
* waits for the root;
* probes;
* a stop on the run time.

## Simulating

All files are SystemVerilog 2017. `rtl/hsnn_pkg.sv` must be read first; the
other modules are found by name. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/hsnn_pkg.sv \
    tb/tb_hsnn_top.sv --top-module tb_hsnn_top -Mdir obj
./obj/Vtb_hsnn_top
```

Replace the testbench name for any other block.

`tb_hsnn_top` shows how a host loads and runs the network: the `host` task,
the table formulas and the readout. The size is set by `LEVELS` alone;
`N_NEURONS` follows from it.
