# A synchronous TrueNorth-style neurosynaptic network in SystemVerilog

IBM's TrueNorth chip computes with spiking neurons. It is built from identical
*cores*, and each core joins 256 input axons to 256 leaky integrate-and-fire
neurons through a 256 x 256 binary crossbar. Time advances in global *ticks* (1 kHz).
In each tick every neuron adds up the weights of the axons that carry a spike
and that it is connected to, applies a leak, and compares the result with two
thresholds. A neuron that fires sends a spike *packet* through a 2-D mesh of
routers to one axon of some core, to be delivered a given number of ticks later.
The original chip is globally synchronous and locally asynchronous. This RTL
rebuilds the same core as a fully synchronous design, so that it can be placed
on an FPGA and changed freely. It follows the emulation design of Valancius et
al., "FPGA Based Emulation Environment for Neuromorphic Architectures". That
design uses TrueNorth as the reference architecture and, as its example of a
change, adds an option that makes the neuron's negative threshold symmetric.

The code is a parameterised core (`truenorth_core`) and a mesh of cores with
host-side buffers (`truenorth_top`). By default the mesh is 5 x 1 cores of
256 neurons x 256 axons each. That is the size of the five-core MNIST
classifier: four input cores feed one classification core.

## The data a core holds

Each neuron is one 386-bit row of the core SRAM (`csram_mem`). The whole row
is read in one clock.

| field | bits | meaning |
|---|---|---|
| synapses | 256 | bit *a* = 1: axon *a* connects to this neuron |
| potential | 9 | signed membrane potential, stored between ticks |
| reset potential | 9 | value after a positive (and, by reset mode, negative) reset |
| weights 0..3 | 4 x 9 | signed synaptic weights, one per axon type |
| leak | 9 | signed, added once per tick |
| positive threshold | 18 | signed, fire when potential >= it |
| negative threshold | 18 | signed, reset when potential < it (or <= it) |
| reset mode | 1 | 0: negative reset to +reset potential, 1: to -reset potential |
| destination dx, dy, axon | 9 + 9 + 8 | where the spike goes |
| delivery tick | 4 | how many ticks later it is delivered |

The widths are the published ones. The order is this design's own (see
`tn_pkg::neuron_params_t`). The row is `{synapses[255:0], neuron_params_t}`,
with synapse bit *a* at row bit `130 + a`. The last 30 bits of the row are
the spike packet itself.

Each **axon** also has a 2-bit *type*, which picks one of the four weights of
every neuron that axon reaches. Types are kept in a separate 256 x 2 table per
core.

The **scheduler** holds 16 columns of 256 bits: the spikes waiting for
each axon in each of the next 16 ticks. A 4-bit counter marks the *active*
column, the one the current tick reads.

## Spike packets and the mesh

A packet is 30 bits: `{dx[8:0], dy[8:0], axon[7:0], tick[3:0]}` (`tn_pkg::pkt_t`).
dx and dy are signed hop counts. Packets travel east or west first
(dx > 0: east, dx < 0: west), and each hop moves dx one step towards 0. When
dx = 0, the dx field is dropped. The 21-bit rest travels north (dy > 0) or
south (dy < 0), again one step towards 0 per hop. When dy = 0 too, the
12-bit `{axon, tick}` goes to the local scheduler. There it sets bit
`axon` of column `active + tick (mod 16)`. A packet with tick = 0 would land
in the column being read. The scheduler drops it and pulses its error flag.

### Router

Each router (`router`) has the six parts of the published design: *from
local*, *forward east/west/north/south* and *to local*. What sets it apart
from IBM's router is **where the buffers sit**. IBM puts one buffer at the input of each
direction. Such a buffer can send to three places, so its back-pressure logic
has to listen to all three. Here the buffers sit on the *outputs* of each decision:

```
from local : dx<0 ? [buf]->west merge : [buf]->east merge
fwd east   : merge(west_in, from local) -> dx==0 ? (dy>0 ? [buf]->north merge : [buf]->south merge)
                                                 : dx-1 -> [buf] -> east_out
fwd west   : same with dx+1 -> west_out
fwd north  : merge(from east, from west, south_in) -> dy==0 ? [buf]->to local : dy-1 -> [buf] -> north_out
fwd south  : merge(from east, from west, north_in) -> dy==0 ? [buf]->to local : dy+1 -> [buf] -> south_out
to local   : merge(two buffers) -> scheduler
```

That makes 12 FIFOs (`tn_fifo`, depth 4). Every FIFO sits between two merges (`tn_merge`,
round robin). A merge takes a packet from a non-empty FIFO only when none of
the FIFOs after it is full, so a packet is never lost and no FIFO needs
more than its own `full` flag. A link between neighbours has two forward
signals, `*_out_valid` (the head of the sender's output FIFO) and the packet.
The one backward signal is `*_rd`, the receiving merge's read enable. A
single flow goes through a router at one packet per clock.

## What happens in one tick

`token_controller` is an 8-state machine. It takes the place of the 269-state
asynchronous controller of the original:

| state | action |
|---|---|
| 0 | wait for `tick` |
| 1 | advance the scheduler's active column; select core SRAM row 0 |
| 2 | wait one clock for the row |
| 3 | axon 0: load the stored potential into the neuron block, add the weight if the axon has a spike *and* a synapse |
| 4 | axons 1 .. 255, one per clock |
| 5 | write the new potential back; if the neuron fires, raise spike-valid to the router (wait here while the router's local input is full) |
| 6 | drop spike-valid; last neuron ? state 7 : next row, state 2 |
| 7 | clear the active scheduler column; back to 0 |

A neuron therefore takes AXONS + 3 clocks and a tick takes
**2 + NEURONS x (AXONS + 3) = 66,306 clocks** by default, plus any stall in
state 5. At a 1 kHz tick rate the clock must therefore be at least about
66 MHz. `tick` must not arrive while a core is busy. If it does, the core's
`tc_error` is raised. That error is kept apart from `sched_error`, so a fault
in the scheduler can be told from a fault in the controller.

## The neuron block

`neuron_block` holds the running sum of one neuron:

```
acc   <= (new_neuron ? V(t-1) : acc) + (process_spike ? weight[type] : 0)
V     =  acc + leak
spike =  V >= pos_thr
V(t)  =  spike ? pos_reset : (V < neg_thr ? neg_reset : sat9(V))      // reference
                             (V <= neg_thr ...)                        // SYMMETRIC_THR = 1
```

The register is 18 bits wide and the stored potential is clipped to 9 bits.
Both are this design's choices.

**Why the threshold mode matters.** Signed vector-matrix multiplication
keeps a "+" and a "-" copy of each neuron, and relies on both copies
resetting in the same way. With `<` a "-" neuron whose potential equals
the negative threshold keeps that negative value instead of resetting to
zero, and it later misses a spike. To correct this, the reference mapping
routes the spikes back through extra *feedback* neurons, which doubles the
neurons needed. With `<=` (`SYMMETRIC_THR = 1`) the feedback neurons are not
needed: an 8 x 8 signed product then needs 32 axons x 128 neurons instead of
160 x 256. `tb_threshold_modes` runs the published three-tick example in
both modes. The "+" neuron fires at tick 1 in both. The "-" neuron fires at
tick 3 only in the symmetric core. In the reference core its potential
stays at -1, -1 and then returns to 0.

## The network and its host interface

`truenorth_top` places core (x, y) at index `y*NX + x`, with +x east and +y north.

* **Input.** The host pushes packets (`in_valid/in_data/in_ready`) into the
  input buffer (`tick_fifo`). A packet for core (x, y) carries dx = x, dy = y.
  Everything pushed before a tick pulse is released at that pulse and enters
  the mesh through the west link of core (0, 0). The core's counter has already
  advanced by the time a packet arrives, so an input with tick offset 1,
  released at pulse *k*, is integrated at pulse *k + 1*.
* **Output.** Packets that leave the mesh eastwards are the network's
  outputs. A neuron of core (x, y) reaches the output with dx = NX - x. The
  `output_buffer` collects them during a tick, tags each with its mesh row,
  and releases them at the next pulse (`out_valid/out_data/out_row/out_rd`).
  So the host sees each tick's outputs together, one tick late. This matches
  how the reference simulator, IBM's Compass, reports outputs. If the host
  stops reading, back-pressure fills the routers and the cores stall in
  state 5. No packet is lost. The same happens when one tick sends more than
  `OUT_DEPTH` packets east, because the buffer releases only at a pulse. The
  stalled tick then cannot finish until the next pulse arrives, and that
  pulse is flagged as an overrun (`tc_error`). Size `OUT_DEPTH` for the
  busiest tick's output.
* **Edges.** Packets leaving west, north or south have nowhere to go. They are
  drained and counted in `edge_drops`.
* **Configuration.** While `cfg_ready` (all cores idle), `cfg_we` with
  `cfg_core`, `cfg_sel = 0`, `cfg_addr = neuron` writes a 386-bit row.
  `cfg_sel = 1`, `cfg_addr = axon` writes an axon type (`cfg_wdata[1:0]`).

In the original system these ports are fed by a DMA engine, and host threads
on the processor side move packets from and to storage. Neither is part of
this RTL.

## Parameters

| module | parameter | default | note |
|---|---|---|---|
| truenorth_top | NX, NY | 5, 1 | five-core network. A 10 x 11 mesh (110 cores) was the largest the authors fit on their FPGA; it is simulated by `tb_mesh_10x11` |
| all | NEURONS, AXONS | 256, 256 | published core size |
| router | FIFO_DEPTH | 4 | own choice |
| truenorth_top | IN_DEPTH, OUT_DEPTH | 1024, 256 | own choice: 4 x 256 inputs, 250 output neurons per tick |
| neuron_block | SYMMETRIC_THR | 0 | 1 = symmetric negative threshold |

The packet and row widths live in `tn_pkg` and are fixed. AXONS above 256
would need a wider axon field.

## How far it follows the published design

Taken from the publication:
* the five core components and how they connect
* the 386-bit row and its field widths
* the neuron datapath: weight mux by axon type, spike/synapse gate, new-neuron
  mux, leak after the register, `>=` and `<` / `<=` comparators, positive
  reset taking priority
* the 256 x 16 scheduler with a 4-bit counter, its drop-and-flag rule and its clear
* the 8 states and their transitions
* the router's structure, decisions, hop updates, buffer placement and
  read-enable/full back-pressure
* the output buffer's one-tick delay

Own choices, where the publication is silent or unclear:
* **Threshold width.** The SRAM table gives 18 bits. The neuron drawing marks 9. 18 is used.
* **Scheduler column.** The text places a spike relative to the active
  column. The scheduler drawing compares the offset directly with the read
  address. The text is followed: the column is `active + offset`, and offset 0
  is the error.
* **Router select labels.** Some select labels in the router drawing point
  the opposite way to the hop updates next to them. The routing follows the
  updates.
* Where axon types are stored, what the reset-mode bit means, the clipping of
  the stored potential, the field order in the row, and the packet bit
  positions other than tick = [3:0].
* The stall in state 5, the `tc_error` condition, the configuration port,
  FIFO depths, round-robin merges, and where the host's inputs and outputs
  meet the mesh.

Not reproduced:
* the block-RAM packing of the SRAM (five 512 x 72 blocks and one 512 x 36).
  The SRAM here is one plain array.
* the trained MNIST network and its 96.28 % accuracy, since the weights are not
  available
* the vector-matrix mapping of Fair et al. beyond the three-tick example, since
  its wiring is not given

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it establishes |
|---|---|
| tb_neuron_block | integration, leak, both comparators at equality, reset priority, saturation; both threshold modes against an integer model |
| tb_csram_mem / tb_csram_ctrl | full-size row storage, 1-clock read, row walk and done |
| tb_scheduler | relative placement, 16-tick wrap, clear, error count |
| tb_token_controller | per-axon gating, one write per neuron, spike pulse, stall, exact tick length, overrun error |
| tb_router | every exit direction and header update from all five inputs under random back-pressure: no loss or duplication, local input refused when full, 1 packet/clock streaming |
| tb_tick_fifo / tb_output_buffer | release exactly at the next tick, order, row tags, full handling |
| tb_truenorth_core | full-size core over 5 ticks against a tick-level model: all 256 potentials, packets, self-delivery, errors, tick length |
| tb_truenorth_top | default 5-core network in the MNIST topology (random, untrained weights), 10 ticks against a network model: every potential, every output and its tick. Each mechanism must occur: inter-core and delayed delivery, scheduler error, back-pressure stall, late release, edge drop |
| tb_threshold_modes | the "+/-" neuron example in the two core shapes of the signed 8 x 8 vector-matrix product: the reference core (160 axons x 256 neurons, `<`) and the symmetric one (32 x 128, `<=`). It also checks their tick lengths, 41,730 and 4,482 clocks |
| tb_mesh_3x3 / tb_mesh_10x11 | random networks on 9 and on 110 full-size cores (the latter is the largest published grid), checked every tick against a network model. Deliveries must occur in all four directions, outputs must come from every mesh row, and edge drops must occur. The shared checker is `mesh_net_check` |

The testbenches model the host. They read internal state by hierarchical
name (`u_core.u_mem.mem`, `u_tc.stall`) only to compare it, never to drive it.

To run one with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/tn_pkg.sv tb/tb_truenorth_top.sv \
          --top-module tb_truenorth_top -Mdir obj && obj/Vtb_truenorth_top
```

The full-size network test simulates ten ticks (about 700,000 clocks) in a
few seconds. The mesh tests also need `-y tb` for their shared checker. The
110-core one takes about a minute to build and half a minute to run.
