# RACE: learned control of reversible channel buffers in a mesh NoC

In most networks-on-chip each router input port has a fixed number of flit
buffers. Traffic does not use them evenly. At any moment some ports are short
of buffers while the buffers of neighbouring ports sit empty, and which ports
are short changes from one stretch of a few dozen cycles to the next. This
design moves most of the buffering out of the routers and into the links. The
two one-way links between neighbouring routers become one **reversible
multi-function channel (RMC)**. An RMC is a set of physical subchannels, and
each subchannel can carry or store flits in either direction. A small
**reinforcement-learning agent** on every link decides, once per 50-cycle
epoch, how many subchannels each direction gets. The agent learns offline;
the chip only runs inference.

The RTL here describes the whole network. It has 64 routers in an 8x8 mesh
and 112 links, and each link has its RMC, the RMC's controller, an agent and
a reward monitor. The defaults are those of the evaluated platform:

| quantity | value |
|---|---|
| mesh | 8 x 8, XY routing, credit-based flow control, no virtual channels |
| flit / subchannel width | 128 bits |
| subchannels per RMC | 4 (one fixed each way, two reversible) |
| RMC buffers per subchannel | 4 |
| router buffers per input port | 2 |
| buffers per input port | 2 + 4 x (1..3) = 6 to 14 |
| epoch | 50 cycles |
| agent network | 8 inputs, 5 hidden, 3 outputs |

## The reversible channel

An RMC sits between router **A** (the west or north router) and router **B**
(the east or south router). Each of its `NSUB` subchannels (`rmc_subchannel`)
holds up to `NBUF` flits and points either A->B or B->A. Subchannel 0 always
points A->B and subchannel `NSUB-1` always points B->A, so both directions
keep a path. The subchannels in between are reversible. With four
subchannels the possible allocations are (1,3), (2,2) and (3,1): A->B
subchannels first, then B->A.

The RMC has a DEMUX and a MUX on each side. Whatever the allocation, one flit
per direction per cycle enters the channel and one leaves it. More
subchannels in a direction add **buffering, not bandwidth**. Each direction
works in one of two modes:

* **Repeater mode.** Nothing of this direction is stored and the receiving
  router's input buffer has room. The arriving flit goes straight through, in
  the same cycle, into the receiver's input buffer.
* **Storage mode.** The receiver is congested (its input buffer is full), or
  older flits are still stored. The flit is written into the lowest-numbered
  subchannel that points the right way and is not full. Stored flits move
  into the router oldest first, as room appears.

A flit that is stored can sit in any of a direction's subchannels. To keep
arrival order, each direction has an order queue. The queue records which
subchannel took each stored flit, and the MUX always reads the subchannel at
the head of the queue. As a result, flits leave a link in the order they
entered it, and packets stay contiguous.

### Reversal

A subchannel can only change direction when it is empty. The controller
(`rmc_ctrl`) compares each subchannel's direction with the target allocation:
subchannel *i* should point A->B exactly when *i* < `target_ab`. A subchannel
pointing the wrong way is **write-blocked** at once. Its stored flits keep
draining into the receiving router, and it reverses at the clock edge of the
first cycle it is empty. An empty subchannel therefore reverses in the same
cycle the new target arrives. A full one, behind a congested router, may take
many cycles. This drain time is the reversal latency. An agent that reverses
too often pays for it, and the reward is built to discourage that.

## Credits: the agent's view of congestion

Each router keeps, per mesh output port, the number of flits it has sent and
not yet had credited back (`in_flight`). A credit comes back when a flit
leaves the next router's input buffer. The number of buffers ahead of the
port changes as subchannels move. The RMC controller therefore reports it:

    cap = RB + NBUF x (subchannels of that direction that can be written)

The router publishes `credit = max(0, cap - in_flight)`, which is 0 to 14
with the defaults. A subchannel that is draining towards a reversal is not
counted in `cap`, so while it drains the credit count is slightly
pessimistic. Ports on the mesh edge report 0.

The state of a link's agent is the eight credits of its two routers, in the
order `[C_AN, C_AE, C_AS, C_AW, C_BN, C_BE, C_BS, C_BW]`. A router's credits
reflect how full *its* neighbours are. The agent of one link therefore sees
congestion one hop beyond the link, without any extra wiring across the mesh.

## The agent

`race_agent` counts 50-cycle epochs. In the last cycle of each epoch
(`epoch_end`) it latches the eight credits and starts its Q-network
(`dqn_mlp`):

* 8 unsigned integer inputs, then 5 ReLU hidden neurons, then 3 linear
  outputs. The three outputs are the Q values of the actions (1,3), (2,2)
  and (3,1).
* Weights and biases are signed Q8.8 (16 bits). Accumulators are 40 bits.
  Hidden values saturate to 16 bits.
* The hidden layer takes one input per cycle on 5 multiply-accumulate units.
  The output layer then takes one hidden value per cycle on 3 units. `done`
  comes 15 cycles after start. The allocation changes at the 16th clock edge
  after the sampling edge, well inside the epoch.
* The action with the largest Q wins. Ties go to the balanced action, then
  to the lowest index.

Action *j* becomes `target_ab = j + 1`. After reset every link is at the
balanced allocation and all weights are zero. With zero weights all Q values
tie, so the links stay balanced until weights are loaded.

Weights are written through the top-level `wcfg_*` port. `wcfg_link` selects
one agent, and `wcfg_bcast` writes all agents at once. Within an agent the
layout is:

| address | contents |
|---|---|
| `h*8 + i` (0..39) | W1[h][i], input i to hidden h |
| `40 + h` | b1[h] |
| `45 + o*5 + h` | W2[o][h], hidden h to output o |
| `60 + o` | b2[o] |

For other sizes the layout is the same, with `N_IN = 8`, `N_HID` and
`N_OUT = NSUB-1` in place of 8, 5 and 3.

## Falsefull and the reward

A **falsefull** is a cycle in which every subchannel of one direction is
full while a *reversible* subchannel of the other direction is empty. The
first direction looks full, but the RMC could have given it more room.
`reward_unit` flags this every cycle and counts it over the epoch. At the end
of the epoch it emits

    r = -EPS * c_unequal - (falsefull cycles in the epoch),   EPS = 1

where `c_unequal` is 1 unless the allocation was (2,2). This small bias
pulls the agent back to the balanced position when nothing is gained, which
leaves it one reversal away from either extreme. Training uses Q-learning
with learning rate 0.001 and discount 0.99, and happens offline, so the
reward here is a monitor output (`link_reward`, `link_ff_total`). It is
useful for collecting training data or for judging a set of weights in
simulation.

## Routers

`router` has five ports: N, E, S, W and Local. Each input port has a 2-flit
buffer. The network uses wormhole switching. A packet's head flit carries the
destination. The head is routed X first, then Y (y grows southwards), and the
rest of the packet follows it. An output stays locked to one input from head
to tail. Free outputs are granted round-robin. Allocation and crossbar are
combinational from the buffer heads. A hop through an idle router and a link
in repeater mode therefore costs one cycle. An input buffer that is full is
the congestion signal seen by the RMC feeding it.

Flit layout (`noc_pkg::flit_t`, 128 bits, most significant bits first): `head`,
`tail`, `dst_x`, `dst_y`, `src_x`, `src_y` (3 bits each), then 114 bits of
payload.

## Files

| file | contents |
|---|---|
| `rtl/noc_pkg.sv` | flit type, port and direction enums, per-link event struct |
| `rtl/rmc_subchannel.sv` | one reversible subchannel (NBUF-entry FIFO with direction) |
| `rtl/rmc.sv` | the RMC: subchannels, DEMUX/MUX, repeater/storage modes, order queues |
| `rtl/rmc_ctrl.sv` | drain-then-reverse sequencer, capacity for the credit counters |
| `rtl/dqn_mlp.sv` | 8-5-3 Q-network inference with weight registers |
| `rtl/race_agent.sv` | epoch timer, state sampling, action to allocation |
| `rtl/reward_unit.sv` | falsefull detection, epoch reward, falsefull total |
| `rtl/flit_fifo.sv` | router input buffer |
| `rtl/router.sv` | five-port XY wormhole router with credit counters |
| `rtl/race_link.sv` | one link: RMC + controller + agent + reward unit |
| `rtl/race_noc.sv` | top: the 8x8 mesh |

Each module has a testbench `tb/tb_<module>.sv` (there is none for the two
small helpers `flit_fifo` and `race_link`, which the router and top tests
cover). Each testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. `tb_race_noc` runs the full 8x8 mesh at its
default parameters. It broadcasts test weights that compare the two routers'
credit sums. It then drives uniform-random traffic, then a hotspot phase
(70 % of packets to node 35), then a transpose pattern, and drains the mesh.
It checks delivery, data, order and packet contiguity end to end. It also
counts repeater-mode passes, stores, write-blocked drains, reversals,
falsefulls, each allocation, agent actions, rewards and injection stalls, and
fails if any of them never happened. `tb_race_noc_sens` runs the same test
through `tb/noc_harness.sv` on the three systems of the subchannel
sensitivity study (see below). For a short build it uses a 4x4 mesh instead
of 8x8, with node 5 as the hotspot.

To simulate with Verilator, for example:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_race_noc \
        -y rtl -y tb +libext+.sv -Irtl rtl/noc_pkg.sv tb/tb_race_noc.sv
    ./obj_dir/Vtb_race_noc

The full mesh builds in about two minutes. It simulates about 3,500 cycles
(10,000 flits) in under a second.

## Parameters and what they change

`race_noc` takes `MESH_X`, `MESH_Y` (at most 8, limited by the 3-bit
coordinate fields), `NSUB`, `NBUF`, `RB`, `EPOCH`, `N_HID`, `W_W` and `FRAC`.
`NSUB` sets both the subchannel count and the number of actions (`NSUB-1`).
The weight layout and the widths of `target_ab` and the credits follow from
these parameters. The sensitivity study's systems correspond to these
settings:

| system | NSUB | NBUF | RB | buffers per port |
|---|---|---|---|---|
| 4S_4CB_3RB | 4 | 4 | 3 | 3 + 4 x (1..3) |
| 6S_3CB_2RB | 6 | 3 | 2 | 2 + 3 x (1..5) |
| 8S_2CB_3RB | 8 | 2 | 3 | 3 + 2 x (1..7) |

## How far it has been checked

Every module in `rtl/` passes Verilator lint and the slang front end of
Yosys. Every testbench passes. For each block, a copy with one deliberate
bug makes its testbench fail. The checks compare against models written
independently in the testbenches:

* queue models for the subchannel, the channel and the router;
* an integer re-implementation of the Q-network;
* a direct evaluation of the falsefull and reward formulas.

Rates and latencies are checked too: one flit per direction per cycle, the
same-cycle pass-through in repeater mode, the 50-cycle epoch, the 15-cycle
inference, and the reversal happening in the first empty cycle.

The following were not checked:

* **Latency, energy and falsefull rate of the trained policy.** The trained
  weights are not available. With the hand-made test weights the agents
  mostly sit at the extreme allocations, so the falsefull counts from the
  end-to-end tests say nothing about the trained policy.
* **Synthesis.** The design has not been synthesized for timing at 2 GHz.
  The combinational path from a router's buffer head, through allocation
  and an RMC in repeater mode, into the next router's buffer is the one to
  watch.
* **Intermediate allocations.** In the 6- and 8-subchannel runs the test
  weights produce only the balanced and extreme allocations. The
  intermediate ones are exercised only by the unit tests of the controller
  and the channel, and only at 4 subchannels.

## Where this RTL departs from, or adds to, the published description

The published description gives the platform, the RMC's behaviour, the
state, action and reward, and the network's size. Everything below is this
design's own choice:

* **The channel buffer cell.** The buffer cell is a tri-state repeater that
  can latch a flit. Here it is modelled as one entry of a synchronous FIFO.
  The repeater function is the same-cycle bypass. Reversal takes no extra
  cycles beyond the drain time. The 5 to 11 cycles of reversal latency
  reported for the original RTL come only from draining here.
* **Order across subchannels.** The order queue, and the DEMUX's choice of
  the lowest free subchannel, are not described in the source.
* **Congestion signal.** The receiving router's "buffer full" goes directly
  to the RMC datapath rather than through the controller.
* **Credits.** Credits are computed as `cap - in_flight`, with `cap` coming
  from the RMC controller, so that they track the reconfigurable depth.
* **Network datapath.** ReLU, Q8.8, the MAC schedule, the 15-cycle latency,
  the sampling point at the end of the epoch and the tie rule are all
  assumptions.
* **Weights.** The weights are not published. There is a load port, and the
  testbenches use hand-made weights. A network with those weights is not the
  trained RACE policy.
* **Router microarchitecture.** Wormhole packets of 1 to 4 flits,
  round-robin allocation, the single-cycle router and the flit layout are all
  assumptions.
* **Router buffers.** The platform table gives 2 router buffers per port,
  which is what the RTL uses. The sensitivity study's 4-subchannel system is
  labelled with 3.
* **Not included.** The cores that generate traffic and the offline
  training are not part of the RTL.
