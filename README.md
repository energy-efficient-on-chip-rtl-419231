# Hybrid-switched 4x4 mesh network-on-chip with profiled circuits

## The idea

A virtual-channel (VC) router spends most of its energy and latency on work that a
repeated traffic pattern does not need: writing every flit into a buffer, computing a
route, arbitrating for a VC and for the switch, and reading the flit out again. On-chip
traffic is repetitive. A few source/destination pairs (a core and the L2 bank it keeps
missing in, for example) carry a large share of all flits. If those pairs had dedicated
paths set up in advance, their flits could cross each router in one cycle, without
buffering, while all other traffic keeps using ordinary VC flow control.

This design does that by space-division multiplexing. Each 128-bit mesh link is split into
`NUM_SUBNETS` narrower subnets (two 64-bit planes by default):

* **plane 0** is a normal packet-switched VC network with X-Y routing;
* **planes 1..NUM_SUBNETS-1** are circuit-switched (CS) planes. Their router inputs can be
  tied to a fixed output by a one-bit `CS_flag`. A flit arriving on such an input skips the
  buffers and the allocators and leaves in the next cycle. The input's VC buffers are then
  unused, and a power-gate request (`buf_gate`) is raised for them.

Circuits are not set up per packet, as in classic circuit switching. They are chosen from
a **traffic profile**, a count of flits per source/destination pair, and stay in place for
a whole run (static mode) or for one epoch (adaptive mode). A packet whose source and
destination match a circuit uses it. Every other packet uses plane 0. There is no set-up
latency and no packet ever waits for a circuit.

## Blocks and hierarchy

```
hs_noc_top
 ├── hs_router        x16   (one per tile, ROUTER_ID = y*4 + x)
 │    ├── hs_input_unit     x12  (one per sub-port)
 │    │    └── hs_route_compute
 │    ├── hs_vcsa_alloc          (VC + switch allocation, credits)
 │    │    └── hs_rr_arbiter
 │    └── hs_crossbar            (12x12, output latches, circuit bypass)
 ├── hs_link          x(48 mesh links x 2 planes)
 ├── hs_ni            x32   (two per router: core, L2 bank + directory)
 │    └── hs_traffic_profiler
 ├── hs_circuit_config      (shadow/active CS_flag and circuit tables)
 └── hs_epoch_ctrl          (epoch / configuration / drain sequencer)
hs_pkg                      (sizes, flit/credit/table types, X-Y helpers)
```

Every router has six wide ports: N=0, E=1, S=2, W=3, core=4 and L2/directory=5. Each wide
port has one narrow sub-port per plane, numbered `plane*6 + port`. A two-subnet router
therefore has 12 input and 12 output sub-ports of 64 bits each. Network interface `n`
connects to router `n/2` on local port `4 + n%2`.

## Packets, flits and flow control

* A control packet is 128 bits and a data packet is 640 bits. On a 64-bit plane they are 2
  and 10 flits. The NI cuts the payload into plane-width slices, lowest bits first.
* A flit (`flit_t`) carries the payload slice plus side-band fields: type
  (head/body/tail/head-tail), virtual network, the VC at the receiving buffer, and the
  source and destination NI.
* There are 3 virtual networks with 4 VCs each, so 12 VCs per input sub-port. Each VC holds
  `BUF_DEPTH` = 4 flits.
* Flow control is credit-based. A credit (`credit_t`) names a VC. Its `free` bit marks the
  credit for a tail flit, and the upstream side may then give that VC to a new packet.
  Only one packet occupies a VC at a time.

## The VC path (plane 0, and CS planes without a circuit)

This is a 4-stage router. A link adds one cycle.

| cycle | stage |
|-------|-------|
| 1 | buffer write; route computation for a head flit |
| 2 | VC allocation: a round-robin arbiter per output picks one requester, which gets the lowest free VC of its virtual network |
| 3 | switch allocation: separable and input-first. One VC per input, then one input per output. It needs a credit for the output VC |
| 4 | switch traversal into the output latch, then onto the link |

Measured with no other traffic, a packet crossing 3 hops (4 routers) takes 19 cycles
from the NI's injection register to the destination NI's ejection port.

## The circuit path

When an input sub-port on a CS plane has `CS_flag` set, `hs_input_unit` puts each arriving
flit into a one-cycle input latch. `hs_crossbar` connects that latch directly to the
configured output on the same plane. That output is marked *claimed*: the allocators leave
it alone, and its output latch is bypassed. A flit therefore spends one cycle per router
and one per link. A 3-hop end-to-end circuit takes 7 cycles from NI to NI (4 routers + 3
links). This matches the figure the design is built around, and the testbenches check it.

Circuits carry no allocation, so their credits must go somewhere. A router forwards the
credit that arrives at a claimed output straight back out of the input that owns the
circuit. The source NI thus sees credits from the destination NI, which returns them as
soon as it receives each flit. The credit loop of a circuit therefore spans its whole
length. This is this design's own choice; the source gives no credit scheme for circuits.

### End-to-end circuits

An end-to-end circuit runs from a source NI's injection sub-port on plane `p` to a
destination NI's ejection sub-port, and every router on the X-Y path has `CS_flag` set. Each
NI has one entry per CS plane (`e2e_entry_t {valid, dst_ni}`). When a packet is accepted
and an entry matches its destination (and `hold` is low), the NI injects it on that plane.
Otherwise the packet goes on plane 0.

### Router-to-router circuits

End-to-end circuits run out of ports quickly: every local port of each plane can serve only
one circuit. The relaxed form runs between routers. The first and last routers keep their
normal routing and arbitration, and only the routers in between are crossed in one cycle.

* At the **first router**, `hs_route_compute` checks the table `r2r_cfg[plane][direction]`
  (`{valid, dst_router}`). If the packet entered at a local port of this router and an
  entry's `dst_router` equals the packet's destination router, the head is routed to that
  direction on the CS plane instead of plane 0. The entry's direction must be the X-Y
  direction, so the circuit follows the X-Y path.
* The **routers in between** have `CS_flag` set on the path.
* At the **last router**, the CS input has `CS_flag` clear. The flit is buffered and routed
  there as usual (to its local port).

A 3-hop packet on such a circuit takes 13 cycles NI to NI, against 19 on plane 0. The
time saved grows with the number of intermediate routers. The original description gives a 3-hop example in
which only "the second hop" is circuit-switched. This design takes the general rule
instead: keep routing and arbitration at the first and last routers, and bypass every
router in between. On a 3-link path that means two bypassed routers.

## Profiles, configuration and epochs

**Profile.** Each NI counts the flits it sends to each destination
(`hs_traffic_profiler`, one 32-bit saturating counter per destination NI). Outside software
reads the counters through the top's `stat_ni`/`stat_dst`/`stat_count` port.

**Set-up algorithm (software).** The intended algorithm is greedy. Score each
source/destination pair by `flits x hops`, sort in descending order, and walk down the
list. Place each pair on the first CS plane where none of its router ports or links is
already used, and drop pairs that conflict. For router-to-router circuits, scores are
added up per router pair. This algorithm is not hardware. The testbench
`tb/hs_noc_tb_common.svh` implements it (`greedy`, `place_e2e`, `place_r2r`) and is the
reference for how to program the tables.

**Configuration bus** (`hs_circuit_config`). Software writes a *shadow* copy of all tables
over a 16-bit bus. The shadow copy is copied into the *active* tables in a single cycle
when `apply` pulses, so a configuration never goes live half-written.

| `cfg_addr[15:14]` | table | `unit` = `cfg_addr[13:8]` | `ent` = `cfg_addr[7:0]` | `cfg_wdata` |
|---|---|---|---|---|
| 0 | CS_flag | router | input sub-port | `{cs_flag[3], out_port[2:0]}` |
| 1 | router-to-router start | router | `(plane-1)*4 + direction` | `{valid[4], dst_router[3:0]}` |
| 2 | end-to-end start | NI | `plane-1` | `{valid[5], dst_ni[4:0]}` |
| 3 | clear the whole shadow copy | – | – | – |

**Epoch sequencer** (`hs_epoch_ctrl`). There are two modes:

* **Static mode** (`adaptive_en = 0`). Software loads a configuration from a profile
  taken in an earlier run and pulses `apply_req`.
* **Adaptive mode** (`adaptive_en = 1`). The sequencer runs these phases in a loop:
  1. `EPOCH` lasts `EPOCH_LEN` cycles (default 200,000,000). The profiles count traffic.
  2. `CONFIG` lasts `CONFIG_LEN` cycles (default 1,000,000). `in_config` and
     `stat_freeze` are high: the profile is stable while software reads it and writes
     the shadow tables. Traffic keeps flowing on the old circuits.
  3. `DRAIN` raises `hold`. NIs and first routers stop sending new packets onto
     circuits. When every router and NI reports no packet in flight on a CS plane (and
     at least `DRAIN_MIN` cycles have passed), the sequencer pulses `apply` and
     `stat_clear` and starts the next epoch.

  The drain step is this design's own addition. Without it, a packet could be halfway
  along a circuit when the circuit's `CS_flag` bits change under it.

## Testbenches

Every block has a testbench `tb/tb_<module>.sv`. Each one checks its block against an
independently written model or expected values, and prints
`TB_RESULT checks=N failures=M`. The two whole-network testbenches share
`tb/hs_noc_tb_common.svh`:

* `tb_hs_noc_top` shortens epochs to 4000 cycles and configuration periods to 3000. It
  runs these phases in order:
  1. a latency check on plane 0 only;
  2. random traffic with one deliberately heavy pair (NI 0 → NI 6);
  3. reading the profiles, then greedy end-to-end circuits, the 7-cycle latency check and
     traffic;
  4. greedy router-to-router circuits, the 13-cycle check and traffic;
  5. two adaptive epochs, whose circuits software forms during the configuration period.

  A scoreboard checks every flit of every packet. The testbench also counts each mechanism
  (VC packets, flits on end-to-end circuits, flits through router bypasses, credit
  stalls, gated buffers, hold, apply, configuration periods, control and data packets) and
  fails any that never happened.
* `tb_hs_noc_full` runs the same static sequence at the default parameters (200M-cycle
  epochs, so no adaptive epoch completes in simulation).

To simulate with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hs_pkg.sv rtl/hs_*.sv \
    tb/tb_hs_noc_top.sv --top-module tb_hs_noc_top -o sim && ./obj_dir/sim
```

Block testbenches are built the same way with their own top module. Building a
whole-network testbench takes about 8-9 minutes of C++ compilation on 8 cores (longer with
fewer). The run itself takes seconds: 11 s for `tb_hs_noc_top`, about 13,600 packets and
27,000 checks; 4 s for `tb_hs_noc_full`, about 5,600 packets and 11,000 checks. Both end
with no failures, and every counted mechanism occurs. Every block testbench has also been
run against a copy of its block with one deliberate bug, and each one detects it.

## Where this design departs from its source, and what it leaves out

* **Network interfaces.** The system the design is modelled on has 51 network interfaces:
  16 cores, 16 L2 banks, 16 directories, 2 DMA controllers and 1 I/O controller. Its
  routers have only six ports, though. This design keeps the six-port router and gives
  each router two NIs: one for the core, and one shared by the L2 bank and directory of
  the tile. There are no DMA or I/O interfaces.
* **Number of subnets.** Two subnets (one VC plane, one CS plane) is the default and the
  only size simulated. The RTL is written in terms of `NUM_SUBNETS` for 4 and 8 subnets
  (32- and 16-bit planes). With the package constant set to 4 or 8, the whole network
  passes verilator lint, but it has not been simulated at those sizes. Changing the size
  means editing `hs_pkg`.
* **Own choices.** The source gives none of these, so they are this design's:
  * buffer depth (4 flits per VC);
  * the allocator designs (round-robin, separable, lowest free VC);
  * the split of the 4 router cycles into stages;
  * the credit format and the forwarding of credits along circuits;
  * the configuration bus, the shadow/active tables and the drain step;
  * 32-bit profile counters.
* **Not built as logic:**
  * the greedy and genetic set-up algorithms, which are software (greedy is modelled in
    the testbench);
  * the buffer power switches, for which only the `buf_gate` request is produced;
  * the cores, caches, directories, memory and their coherence traffic. Synthetic
    traffic stands in for them; no PARSEC traces were run.
* **Where the circuit path is set.** In the source, the flag passes through the VA/SA
  unit to the output it fixes. Here, each input's table entry (`CS_flag`, output port)
  goes straight to the crossbar. The crossbar reports the claimed outputs back to the
  allocator, which then skips them. The behaviour is the same.
* **Ejection.** An NI always accepts arriving flits. There is no ejection back-pressure
  towards the network.
