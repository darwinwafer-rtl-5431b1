# A wafer of spiking-neuron chiplets joined into one network

This RTL describes a wafer-scale spiking neural network processor. Many
identical neuromorphic dies ("Darwin3" chiplets) sit side by side on a silicon
interposer. Each die is a 24 x 24 mesh of routers with a neuron core at every
router, and the edge routers of neighbouring dies are wired straight to each
other. The result is one large router grid: a spike packet addressed by a
relative offset can travel from any neuron on the wafer to any other, crossing
die boundaries without its format changing. Every die runs on its own clock.
A die-to-die crossing is therefore an asynchronous request/acknowledge
channel, and the whole wafer advances in lock-step *time steps* under a
hierarchy of time-step controllers. Four aggregation controllers on the wafer
rim merge the edge links into a few wide streams toward an external switch.

At the default parameters the top module `darwin_wafer` is a 4 x 2 array of
dies. That is 8 dies x 576 routers, with 575 neuron cores of 4096 neurons each,
or 18.8 M neurons. The full design is 8 x 8 dies and 150 M neurons (see
[Sizes](#sizes)).

## Block map

```
darwin_wafer                      clk_sys + one clk_die[d] per die
 ├─ darwin3_die  [DIES_X*DIES_Y]    clk_die[d]
 │   ├─ reset_gen                   reset release per die
 │   ├─ tik_gen                     turns the step level into a tick
 │   └─ [MESH_Y][MESH_X]
 │       ├─ noc_router              5-port XY router
 │       └─ neuron_node             time-multiplexed LIF core (not at (0,0):
 │                                  that router's local port is the RISC-V port)
 ├─ aer_link  (2 per facing edge-router pair; 2 per rim router)
 ├─ io_agg_ctrl [4]                 N, E, S, W rim, clk_sys
 ├─ ts_local_ctrl [4]               one per quadrant ("domain"), clk_sys
 ├─ ts_global_ctrl                  master, clk_sys
 └─ reset_gen                       per-die reset for the link endpoints
darwin_pkg     packet type, port numbers, configuration map, route()/hop()
sync_fifo      small valid/ready FIFO used by router and neuron node
```

The RISC-V control core of each die and the external switch are not part of
this RTL. Their network channels are ports of the top: `riscv_*[d]` for each
die, and `up_*[e]`/`dn_*[e]` for the four rims.

## Packets and relative addressing

Every transfer is a single 52-bit flit (`darwin_pkg::pkt_t`):

| field | bits | meaning |
|---|---|---|
| `ptype` | 2 | `PT_SPIKE` (0) or `PT_CFG_WR` (1) |
| `dx`, `dy` | 9 + 9, signed | hops still to travel; +dx is east, +dy is south |
| `addr` | 16 | spike: `{parity, 3'b0, neuron[11:0]}`; config: `{select[3:0], index[11:0]}` |
| `data` | 16 | spike: signed synaptic weight; config: value written |

A packet carries no absolute coordinates. Each router sends it one hop in X
until `dx` is 0, then in Y until `dy` is 0, and then delivers it to the local
port. At every hop it moves the offset one step toward zero. A die boundary is
just another hop, so a die-to-die packet needs no header rewriting and no
routing tables. Nine-bit offsets cover the ±191 hops of the full 192 x 192
router grid.

Configuration writes (`PT_CFG_WR`) use `addr[15:12]` to select what is written:

| select | target, indexed by `addr[11:0]` |
|---|---|
| 0 | membrane potential `v` |
| 1 | fan-out `dx` (`data[8:0]`); `data[15]` = entry valid |
| 2 | fan-out `dy` |
| 3 | fan-out target neuron |
| 4 | fan-out weight |
| 5 | node register: 0 leak (Q1.15), 1 threshold, 2 reset potential, 3 number of active neurons |

A host loads a network by injecting these packets through a RISC-V port or a
rim stream. A node takes configuration packets only between time steps, and
holds them back while it is updating.

## Router (`noc_router`)

The router has five ports: N=0, E=1, S=2, W=3, local=4. Each input has a
4-entry FIFO, and each output has a round-robin arbiter over the inputs that
want it. All ports use valid/ready. A packet that arrives at an empty router
with a free output leaves on the next clock edge, so each hop costs one
cycle. An assertion checks that no packet turns back out of the port it came
in on. The `idle` output, meaning all FIFOs are empty, feeds the die's
quiescence detection.

## Neuron node (`neuron_node`)

One node time-multiplexes `NEURONS` (4096) leaky integrate-and-fire neurons
over one datapath. The datapath is a multiply stage followed by an add stage,
each registered:

```
stage 1:  p  = (v * leak) >>> 15          Q1.15 leak
stage 2:  v' = sat16(p + I[bank])         I = input summed during the last step
          fire = v' >= thresh ;  v <= fire ? vreset : v'
```

At each `tick` the node updates neurons 0..nact-1, one per cycle. A neuron
that fires sends one spike packet built from its fan-out entry
(dx, dy, target neuron, weight) through a 4-entry output queue. If the queue
is full, the pipeline stalls (`stall` output) until the router takes a
packet. A node therefore cannot lose a spike, but a congested network slows
its update.

**Two input banks.** Spikes made in step *t* must count in step *t+1*, not in
the step still being updated. Every node therefore has two input-sum memories,
chosen by the step parity. The sending node writes the parity of the *next*
step into `addr[15]`. The receiver adds the weight into that bank and, when it
reads a bank, clears the entry. A spike that is still in flight when its
receiver starts a step is therefore never mixed into the wrong step. An
assertion checks that no spike lands in the bank being read.

After reset a node spends `NEURONS` cycles clearing its memories, and is busy
while doing so. The memories are plain arrays; synthesis maps them to RAM.

## Crossing between dies (`aer_link`)

Each direction of each die-to-die wire is an address-event link of three
controllers in a row:

```
sender clock          |      receiver clock
send ctrl --req/ack-->| async ctrl + latch --req/ack--> receive ctrl --> out
```

The send controller keeps the packet on the data wires and raises `req`. The
async controller synchronises `req` with two flops and copies the data into its
latch, which is safe because bundled data is stable while `req` is high. It
then raises `ack` and starts its own four-phase handshake with the receive
controller, which presents the packet as valid/ready. Both handshakes return to
zero before the next event. The two sides can run at any clock ratio. A link
takes about ten cycles per event, so it is much slower than a router hop. This
is the bandwidth step at a die edge that the hardware must absorb. `tx_busy`
and `rx_busy` report an event in flight for the time-step logic.

In the source design these controllers are clockless circuits. Here they are
clocked state machines behind synchronisers, which lint and synthesise with
ordinary tools.

## Time steps

All neurons on the wafer must finish step *t*, and every spike of step *t* must
be delivered, before any neuron begins step *t+1*. Three levels handle this:

1. **`ts_global_ctrl`** (one, master). It holds a level `step_req` and toggles
   it to start a step. It ends the step when every domain has reported done for
   `HOLD+1` consecutive `clk_sys` cycles, and no earlier than `min_len` cycles
   after the start. A step longer than `min_len` sets `extended`: the step
   length adapts to the traffic, but never drops below a set minimum. The
   outputs are `step_count`, `last_len` and a one-cycle `step_end`.
2. **`ts_local_ctrl`** (one per quadrant of the die array). It passes
   `step_req` to its dies. It reports done when every die's `die_parity` has
   caught up with `step_req` and every die reports idle, both through two-flop
   synchronisers.
3. **`tik_gen`** (one per die). It synchronises `step_req` into the die clock.
   On a change it issues one `tick` to all nodes, with the new step parity. It
   reports `die_idle` when no node is busy, every router is empty and no
   adjacent AER link holds an event.

**Why `HOLD`.** "All dies idle" is sampled through synchronisers. Suppose a
spike is inside an AER link between two otherwise idle dies. The sender's
`tx_busy` and the receiver's `rx_busy` together cover the whole crossing, but
there are a few cycles of synchroniser delay between one dropping and the other
rising. Requiring done to hold for `HOLD+1` cycles (default 16) covers that gap.
A future rework could replace this with an end-to-end event count.

Step-start skew across the wafer is a few die-clock cycles of synchroniser
delay.

## Rim aggregation (`io_agg_ctrl`)

Each rim of the wafer has one aggregation controller with one link per
boundary router. At paper size that is 8 dies x 24 = 192 links per rim; at the
default it is 96 on the north and south rims and 48 on the east and west. The
upward stream (`up_*`) is a round-robin merge of all links that hold a packet,
and each packet is tagged with its link number (`up_port`). The downward stream
(`dn_*`) carries a link number with each packet and is steered into that link,
which lets a host inject configuration or input spikes anywhere along the rim.
Rim links go through AER links because the controllers run on `clk_sys`.
Protocol conversion to Ethernet is outside this RTL.

## Sizes

| parameter | default | full design | note |
|---|---|---|---|
| `DIES_X` x `DIES_Y` | 4 x 2 | 8 x 8 | reduced, see below |
| `MESH_X` x `MESH_Y` | 24 x 24 | 24 x 24 | |
| `NEURONS` per node | 4096 | ≈4087 | 2.35 M neurons per die / 575 nodes, rounded to a power of two |
| `FIFO_DEPTH` (router) | 4 | not given | |
| `HOLD` | 16 | not given | |

The top defaults to 4 x 2 dies because lint-type elaboration of the whole
array needs about 2.3 MB per router. That is about 85 GB at 8 x 8 dies, and
about 11 GB at 4 x 2. The RTL itself is fully parameterised:
`darwin_wafer #(.DIES_X(8), .DIES_Y(8))` is the full wafer.

What the default top can hold, worked out from the sizes above:

- **Neurons.** 18.8 M per 8-die wafer, 2.36 M per die, 150.7 M at 8 x 8.
- **Synapses.** Each neuron has one fan-out entry. A network with average
  fan-out above one (tens of synapses per neuron is typical for brain models)
  does not fit without extra relay neurons.
- **Rate.** Each node adds one incoming event per cycle, so a 64-die wafer at
  333 MHz handles about 12 T synaptic events per second.

Brain-scale networks (tens of thousands to millions of neurons with their
connectivity) have not been run on this RTL. The simulated networks are the
small random ones in the testbenches.

## Where this RTL departs from the source design

- **Neuron core.** The source has a programmable neuron core with its own
  instruction set. Here it is a fixed LIF update using the same
  multiply-then-add pipeline.
- **Synaptic memory.** The source compresses synaptic memory and reallocates
  it at run time. Here each neuron has one uncompressed fan-out entry.
- **Relaying.** The source can relay long-range packets over alternative
  paths. This RTL uses plain XY routing only.
- **Master role.** In the source, one of the domain controllers can be
  configured as master. Here the master is a separate block.
- **Reliability.** Reliability monitoring, self-diagnosis and redundant-node
  remapping are not built.
- **Own choices.** The following are this design's own, not the source's: the
  packet layout, the configuration map, FIFO depths, the four-phase handshake,
  the toggle-level step signalling, the `HOLD` rule and the clocks.
- **Analog and physical parts.** These have no logic function: interposer I/O
  drivers, the interposer itself, power delivery, thermal diodes and the
  mechanical assembly.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/darwin_pkg.sv tb/tb_util_pkg.sv tb/tb_noc_router.sv --top-module tb_noc_router
./obj_dir/Vtb_noc_router
```

Replace the testbench name for the others. `darwin_pkg.sv` comes first; the
remaining modules are found through `-Irtl`.

| testbench | what it checks |
|---|---|
| `tb_noc_router` | random traffic on all ports against a reference, one-cycle hop latency |
| `tb_aer_link` | ordered, lossless transfer at two clock ratios, with receiver back-pressure |
| `tb_neuron_node` | LIF values against a reference model, spike packets, parity banks, stall under a blocked output, update length |
| `tb_reset_gen`, `tb_tik_gen` | release timing; tick, parity and idle |
| `tb_ts_local_ctrl`, `tb_ts_global_ctrl` | done rule, latency, `min_len`, `extended`, step lengths |
| `tb_io_agg_ctrl` | merge, round-robin fairness, steering of the down stream |
| `tb_darwin3_die` | 4 x 3 die configured through its RISC-V port; multi-step network against a reference |
| `tb_darwin_wafer` | end to end on 2 x 2 dies (different clocks) |

`tb_darwin_wafer` configures the network through the west rim. It runs spiking
networks over several steps. It compares every potential, and every packet
that leaves through the east rim, with a reference model. It counts each
mechanism: die-to-die transfers, output-queue stalls, edge links contending at
an aggregation controller, switch back-pressure, steps held to `min_len` and
steps extended by traffic.

The largest configuration simulated end to end is 2 x 2 dies of 3 x 3 routers
with 16 neurons per node. A default-size wafer (4 x 2 dies of 24 x 24) is far
too large to simulate in reasonable time.
