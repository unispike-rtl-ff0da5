# UniSpike: address-merged spike transmission for a many-core neuromorphic mesh

A spiking neural network (SNN) spread over a mesh of neuro-computing cores
spends most of its network traffic on addresses. A spike carries almost no
information. It says only that neuron *n* of core *s* fired. Yet every spike
packet needs a head flit that names its destination core. In the usual
*neuron-centric* core, each neuron sends its packets as soon as it fires.
When twenty neurons of one core all project to core 37, core 37's address
crosses the network twenty times.

This design removes that repetition. A core holds back the spikes bound for a
destination until every local neuron that connects to that destination has
been updated. Then it sends one **address-merged packet**: one head flit
with the destination, followed by one payload flit for each neuron that
fired. The destination address is sent once per destination per timestep,
not once per spike. No spike is lost and none is delayed past the end of the
timestep. The network, the synapses and the neuron model are unchanged; only
the order and packing of the traffic change.

The design has three parts:

1. **Barrier neurons.** Neurons are updated in a fixed order. For each
   destination core there is a last local neuron, after whose update the
   activity of all its connected neurons is known. A compiler computes
   these barrier neurons offline and stores them in a *checking table*.
2. **TS (transmission scheduling) manager.** It watches the update engine
   and fires the packet generator when the neuron just updated is the next
   barrier.
3. **Redesigned packet generator.** It holds a *connection bitmap* per
   destination. It ANDs that bitmap with the timestep's *activation bitmap*
   and emits the surviving neuron ids as payload flits behind one shared head
   flit.

The RTL in `rtl/` builds a complete 32 × 16 mesh of 512 such cores, with XY
routers and a global timestep barrier. The testbenches in `tb/` check each
block on its own and then check the whole system against a software model of
the network.

## Barrier neurons and the checking table

The compiler (not in RTL; modelled in `tb/snn_ref_pkg.sv`) starts from each
core's map of destinations to the local neurons that connect to them,
`{c_i : N_i}`. It builds the neuron execution order `Q` and the table as
follows:

```
sort destinations by |N_i|, smallest first
Q = []
for each destination c_i in that order:
    new = neurons of N_i not yet in Q
    if new is not empty:
        append new to Q;  barrier(c_i) = last neuron appended
    else:
        barrier(c_i) = the neuron of N_i that is latest in Q
append the neurons with no destination to Q
```

Neurons are then renumbered so that their local id is their position in
`Q`. The update engine always walks ids 0, 1, 2, …, so barriers are reached
in rising order. Destinations with the same barrier share one checking-table
entry. Entry *k* of the table holds:

| field     | meaning                                                        |
|-----------|----------------------------------------------------------------|
| `valid`   | entry in use (cleared by reset)                                |
| `barrier` | local id of the barrier neuron                                 |
| `start`   | first post-synaptic connection entry of its destinations       |

The post-synaptic connection memory is laid out in table order. Entry
`start` and the entries after it, up to and including the first one whose
`flag` bit is set, are the destinations of that barrier. Each entry is
`{flag, destination coordinate, connection bitmap[N_NEURONS]}`.

Sorting by `|N_i|` puts destinations fed by a few neurons early. Their
barriers come soon, so their packets enter the network while the rest of
the core is still updating. Sending early overlaps communication with
computation, which is the point of barriers rather than one send at the end
of the timestep.

## One timestep inside a core

```
 ts_start
    │
    ▼
 neuron update engine ──(id, fired)──► TS manager ──start, addr──► packet generator ──► network
    ▲   │                               │  ▲                           ▲   interface (tx)
    │   ▼                               ▼  │                           │
 neuron   weight-sum      activation bitmap  neuron counter ─► checking  index decoder ◄─ post-syn
 state    memory [bank p]                                      table                 connections
 memory        ▲
               │ bank !p
 weight-sum accumulator ◄── pre-synaptic weights ◄── spike packet decoder ◄── network interface (rx)
```

**Compute.** On `ts_start` the bank parity flips. The neuron update
engine then takes neurons 0…N−1 one per accepted cycle. For each neuron it
reads the state word and the weight sum from the current bank, and applies
the leaky integrate-and-fire (LIF) update
`v' = v − (v >>> leak) + ws`. The neuron fires when `v' ≥ vth`, and then `v`
is reset to 0. `v` saturates at 24 bits. The engine writes the state back,
clears the weight sum it used, and hands `(id, fired)` to the TS manager.

**Schedule.** The TS manager sets the neuron's activation bit if it fired.
It compares the id with the `barrier` field of the checking-table entry
selected by the neuron counter. On a match, it starts the packet generator
at that entry's `start` address and advances the counter. If the packet
generator is still busy with the previous barrier, the match stalls the
update engine (`upd_ready` low) until the generator is free. This stall is
the only back-pressure from the send path into computation.

**Send.** For each connection entry, the packet generator:

1. loads `connection bitmap & activation bitmap` into the index decoder (one
   cycle);
2. if the result is zero, skips the destination without sending anything;
3. otherwise sends a head flit `{HEAD, dst, src}` and then one payload flit
   per set bit, lowest index first. The decoder isolates the lowest bit with
   `r & (~r + 1)`, a one-hot value turned into an index, and clears it after
   each flit. The last payload flit is typed TAIL.

It moves to the next entry until it has handled the one whose `flag` is set.
Handling an entry with *k* active neurons takes 2 + *k* cycles when the
network interface never back-pressures; leaving idle takes one cycle. Spikes
of a barrier therefore leave the core as soon as that barrier's neurons are
known.

**Receive.** The spike packet decoder remembers the source coordinate of the
last head flit. It turns every BODY or TAIL flit into a `(source core,
source neuron)` event. A payload flit that arrives outside a packet raises
`err` and is dropped. The weight-sum accumulator looks up the axon
`base[src_core] + src_neuron` in the pre-synaptic weight memory. That gives a
run of `len` synapses starting at `ptr`. It adds each synapse's 8-bit signed
weight into the target neuron's weight sum, one synapse per cycle, with
16-bit saturation. It adds into the *other* bank, so a spike sent in
timestep t is integrated in timestep t + 1. Synaptic weights live at the
receiving core, so a payload flit needs only the sender's neuron id.

**Done.** `ts_done` is high once the update engine has finished, the packet
generator is idle, both network-interface queues are empty, and the
receive path is idle.

## Packets

Flits are 32 bits. The top two bits give the type: `00` none, `01` HEAD,
`10` BODY, `11` TAIL.

| flit | 31:30 | 29:28 | 27:25 | 24:16 | 15:7 | 6:0 |
|------|-------|-------|-------|-------|------|-----|
| head | type  | vc = dst[1:0] | port (0) | destination core | source core | 0 |

| flit | 31:30 | 29:21 | 20:17 | 16:0 |
|------|-------|-------|-------|------|
| BODY / TAIL | type | source neuron id | delay (0) | 0 |

A packet is one head flit and one or more payload flits; the last payload
flit is a TAIL. A destination with no active connected neuron gets no packet
at all. Without merging, each spike would cost a head flit and a tail flit.
With merging, a packet of *k* spikes costs *k* + 1 flits.

## The mesh

`unispike_system` instantiates `MESH_X × MESH_Y` cores. Core (x, y) has
coordinate `y·MESH_X + x`. Each core has one five-port router. Port 0 is
local, 1 goes to x+1, 2 to x−1, 3 to y+1 and 4 to y−1. Routing is XY
(dimension order).

Each port has four virtual channels (VCs). A link carries `valid`, a 2-bit
`vc` and the flit forward, and a 4-bit per-VC `ready` back. Each input keeps
one FIFO_DEPTH-flit FIFO per VC. A packet keeps one VC on every hop: the
VC chosen when it enters the network, which is the low two bits of its
destination. The core's network interface reads that VC from the head flit
and holds it for the packet's payload flits.

Switching is wormhole per VC. A head flit takes VC *v* of its output only if
that VC is free, and holds it until its TAIL passes. Packets on different
VCs can therefore interleave flit by flit on a link, while the flits of one
packet stay in order on their VC. Each cycle a separable allocator runs in
two stages:

1. each input picks one VC that has a flit to send and room downstream,
   round robin;
2. each output picks one of the inputs that chose it, round robin.

Only VCs with room downstream request, so a blocked packet never holds a
link that another VC could use. XY routing is deadlock-free without VCs; the
VCs let packets overtake a blocked one. Edge ports are tied off.

`timestep_sync` is the global barrier. `step_start` launches a timestep: one
`ts_start` pulse goes to every core. `step_done` pulses once all cores
report `ts_done` and all routers are empty, and have stayed so for SETTLE
(3) consecutive cycles. The wait covers flits that are still on a link
register between two routers.

## Configuration and use

All memories are loaded while the system is idle, one word per cycle, through
`cfg_valid / cfg_core / cfg_sel / cfg_addr / cfg_data`.
`cfg_data` is `1 + 9 + N_NEURONS` bits wide. Its layout depends on the
target:

| `cfg_sel`        | address          | data layout (LSB = bit 0)                                   |
|------------------|------------------|-------------------------------------------------------------|
| `CFG_CT` (0)     | table entry      | `start` at 0, `barrier` at CONN_AW, `valid` at CONN_AW+NEUR_W |
| `CFG_CONN` (1)   | connection entry | `bitmap` at 0, `dst` at N_NEURONS, `flag` at N_NEURONS+9     |
| `CFG_AXBASE` (2) | source core      | first axon index of that source core                        |
| `CFG_AXON` (3)   | axon             | `ptr` at 0 (first synapse), `len` at SYN_AW (synapse count) |
| `CFG_SYN` (4)    | synapse          | weight[7:0] (signed), target neuron at bit 8                |
| `CFG_NSTATE` (5) | neuron           | `{v[23:0], vth[15:0], leak[3:0], 4'b0}` as bits 47:0        |

Then pulse `step_start` and wait for `step_done`. The `fire_valid` /
`fire_id` outputs show every neuron that fires. The `cnt_*` outputs count
packets, payload flits, barriers reached, stall cycles, skipped empty
destinations and received spikes. `decode_error` latches any malformed
packet.

Default sizes and what they come from:

| parameter    | default | basis                                                                 |
|--------------|---------|-----------------------------------------------------------------------|
| cores        | 512 (32 × 16) | 512 cores as published; the mesh shape is a choice              |
| `N_NEURONS`  | 512     | the 32.625 KB post-connection SRAM = 512 entries × (1+9+512) bits     |
| `CT_DEPTH`   | 512     | 1.125 KB checking table = 512 entries × 18 bits                       |
| `CONN_DEPTH` | 512     | as above                                                              |
| neuron state | 48 bit  | 3 KB neuron SRAM / 512 neurons                                        |
| synapse memory | 512 × 12 b bases + 4096 × 26 b axons + 40960 × 17 b synapses = 98.5 KB | chosen to sit just under the published 100.75 KB |
| `NUM_VC`     | 4       | 4 virtual channels as published (package constant)                    |
| `FIFO_DEPTH` | 4       | flits per VC FIFO and per network-interface queue; a choice           |

All memories are register arrays with combinational reads. On a chip they
would become SRAM macros, and each read would need one more pipeline stage.

### Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. Package files come
first:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/unispike_pkg.sv tb/tb_packet_generator.sv --top-module tb_packet_generator
./obj_dir/Vtb_packet_generator
```

The core and system testbenches also need `tb/snn_ref_pkg.sv` after the
package. That file holds the reference model: it builds a random
network, runs the barrier compiler above, emits the configuration words
and computes, for every timestep, which neurons fire and how many packets,
payload flits, empty destinations and barriers to expect.

* `tb_unispike_core` loops one core's network port back to itself and runs
  12 timesteps of a 32-neuron recurrent network.
* `tb_unispike_system` runs a 3 × 2 mesh with 32 neurons per core for 10
  timesteps. Each timestep, it checks the fired
  set, the packet and flit counts and the received spikes against the
  model. It also requires that barriers, stalls, merged packets, skipped
  destinations and a flit saving over one-packet-per-spike all occurred.
  A typical run has 180 barriers and 24 stall cycles, and sends 273 flits
  where one packet per spike would send 388.
* `tb_unispike_ei_network` runs the benchmark style of network on the same
  3 × 2 mesh for 12 timesteps: 80 % excitatory and 20 % inhibitory LIF
  neurons with 10 % random connectivity across all cores. Activity sustains
  itself, so every destination gets traffic in most timesteps. Merged
  packets carry 2,714 flits where one packet per spike would carry 4,578,
  a 1.69× reduction. The update engine spends 789 cycles stalled at
  barriers.
* `tb_unispike_system_mesh4` is the largest configuration simulated here.
  It builds a 4 × 4 mesh in which every per-core size is at its default:
  512 neurons, 512-entry tables, 4,096 axons and 40,960 synapses. Seven
  cores carry a random network for three timesteps, with the same checks
  as above.

The full 32 × 16 mesh at default sizes has not been simulated. Verilator
flattens all 512 cores into about 500 MB of C++. On a 4-core machine, compiling
it would take an estimated hour or more. The mesh and the routers are
parameterised, so the 4 × 4 run uses the same code, with 16 routers
instead of 512.

## Where this RTL departs from the published design

* **One clock.** The published cores run at 500 MHz and the network at
  160 MHz. Here everything runs on one clock, so there are no
  clock-domain-crossing FIFOs in the network interface.
* **VC assignment.** Router internals are not published. Here a packet's
  VC is fixed by its destination and is never reassigned hop by hop. That
  keeps the VC state small; a router that reassigns VCs at each hop could
  balance load better.
* **Neuron model.** Only shift-leak LIF is built. The evaluation also uses
  Izhikevich and AdEx neurons, whose update rules are not specified for
  this core.
* **Synapse memory layout.** The axon/synapse indirection and its sizes
  (98.5 KB instead of 100.75 KB) are this design's own. Only the total SRAM
  size is published.
* **Compiler and partitioning.** The barrier compiler and the
  destination-aware partitioning (Hilbert-curve initial placement plus swap
  refinement) are offline software. The compiler exists only as the
  testbench model; partitioning is not provided.
* **Choices where nothing is specified.** These include the flit bit
  positions, the configuration port, the two weight-sum banks, the stall
  rule at a busy barrier, the timestep barrier with its settle window,
  saturation widths and reset values. Each RTL file's opening comment says
  which parts are its own.

## Capacity against the evaluated networks

At default sizes the system holds 262,144 neurons and 20.97 M synapse
entries. Each core has 4,096 incoming-axon slots and 512 destination
entries. Using textbook sizes for the networks, not sizes taken from the
evaluation:

* **Vogels-style network, LIF:** 10 k neurons, 2 % connectivity. It fits
  when spread at about 26 neurons per core.
* **Brunel network, LIF:** 12.5 k neurons, 10 % connectivity, 15.6 M
  synapses. It does not fit: spreading it thin enough for the synapse
  memory gives each core about 12 k source neurons, against 4,096 axon
  slots.
* **Spiking ResNet18, VGG11 and the spiking Transformers:** they do not fit
  when unrolled. They need tens to hundreds of millions of synapse entries.
  The Transformers also multiply spike tensors with each other, which fixed
  synapses cannot express.
