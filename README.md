# Dynamic Partition Merging multicast mesh

A multicast in a mesh network-on-chip can be delivered as many unicasts, which
costs many injected packets, or along one or two long paths, which can mean a
lot of hops. Partition-based schemes split the destination set into regions
around the source and serve each region separately. Usually the regions are
fixed. **Dynamic Partition Merging (DPM)** starts from eight small regions and
merges neighbouring ones whenever serving them together is cheaper. Each final
region is then served by whichever of two methods costs less:

* **multiple unicast (MU):** one packet to a representative node, which sends
  one unicast to each of the other destinations;
* **dual path (DP):** the representative sends two packets, one visiting the
  higher-labelled destinations in order and one visiting the lower ones.

This repository holds synthesizable SystemVerilog for the whole scheme in an
8x8 mesh. That covers the partitioning and merging engine, the network
interfaces that form and forward multicast packets, and a virtual-channel
router with the high/low channel split that keeps the routing deadlock-free.
Every block has a self-checking testbench. There is also one end-to-end
testbench for the full 8x8 network.

## Node labels and the two subnetworks

Nodes are numbered in snake (boustrophedon) order. Node (x,y) in an n x n mesh
gets label `L = y*n + x` on even rows and `L = y*n + n-1-x` on odd rows. Along
this numbering, consecutive labels are always mesh neighbours. Every node except
the last has a neighbour with a higher label, and every node except the first
has one with a lower label.

Routing follows the labels (`dpm_route_unit`):

* **Destination label above the current node:** go to the neighbour with the
  largest label that does not pass the destination. Labels only rise along the
  way. This is the *high-channel subnetwork*, which uses VCs 0 and 1.
* **Destination label below the current node:** go to the neighbour with the
  smallest label that is not below the destination. This is the *low-channel
  subnetwork*, which uses VCs 2 and 3.

A packet therefore never changes subnetwork, and each subnetwork is acyclic in
its channel dependencies. In a 2D mesh this routing is also minimal. The
testbench checks every one of the 4096 source/destination pairs against a
Manhattan-distance walk. Because of this, every hop count below is a Manhattan
distance.

## The DPM engine (`dpm_engine`)

The engine runs at the source S of each multicast. Its input is the
destination set as a 64-bit string, where bit i stands for label i.

1. **Basic partitions** (`dpm_partition_classifier`). Each destination goes
   into one of eight regions around S, counter-clockwise from the north-east:
   P0 NE, P1 N, P2 NW, P3 W, P4 SW, P5 S, P6 SE, P7 E. The regions on the
   axes (P1, P3, P5, P7) hold destinations in the same column or row as S.
2. **Candidates.** There are 24 candidates:
   * the 8 basic partitions Pi (index i);
   * the 8 pairs PiP(i+1) (index 8+i);
   * the 8 triples PiP(i+1)P(i+2) (index 16+i).

   All indices are mod 8, so P7 and P0 are neighbours too.
3. **Cost of a candidate V** (`dpm_cost_unit`):
   * **R**, the representative, is the destination of V nearest to S. Among
     equally near destinations the lower label wins.
   * **Ct = Σ dist(d, R)** is the cost of sending the unicasts from R.
   * **Cp** is the dual-path cost from R. The destinations above L(R) are
     visited in rising label order and those below in falling order. Cp is the
     sum of the hops between consecutive visits.
   * **cost = dist(S, R) + min(Ct, Cp).** DP is chosen only when Cp < Ct, so a
     tie goes to MU.

   The hardware computes Cp without sorting. For each label j it uses the
   nearest set label below j (when j > L(R)) or above j (when j < L(R)). The
   engine evaluates one candidate per clock through a single cost unit.
4. **Saving of a merged candidate:** A = max(0, Σ cost of its basic partitions
   − its own cost).
5. **Greedy selection.** Take the merged candidate with the largest saving.
   Set to zero the saving of every other candidate that shares a *non-empty*
   basic partition with it. Repeat until no saving is left. On equal savings
   the lower index wins, so pairs come before triples.
6. **Output.** The engine emits the selected merged partitions, then every
   non-empty basic partition they do not cover. Each partition comes with its
   R, its MU/DP choice and its cost.

Timing: after `start`, the first partition is offered 27 + (number of merges)
clocks later. The rest follow one per clock under a valid/ready handshake.

### The S→R term and the worked example

Read literally, the algorithm's cost is min(Ct, Cp) measured from R, with no
S→R term. With that cost, merging P0 and P1 in the published 6x6 example saves
nothing. The example, however, shows P0P1 merged. Adding the hops from S to R,
which the packet really travels, makes that merge pay off. This design
therefore uses dist(S,R) + min(Ct,Cp).

With this cost and source (2,2), the example's ten destinations give:

| partition | R | method | cost |
|---|---|---|---|
| P2 | (1,4) | MU | 5 |
| P0P1 | (2,5) | DP | 7 |
| P4P5P6 | (2,1) | — | 6 |

The P4P5P6 merge saves 2. The published figure instead keeps P4P5 and P6
separate. The greedy rule as written finds the P4P5P6 merge, and this design
follows the rule. The engine and end-to-end testbenches both run this example.

## Packets (`dpm_pkg`)

Flits are 80 bits wide. A packet is 4 flits: a head, two body flits and a tail.

| field | bits | meaning |
|---|---|---|
| flit type | 2 | head = 1, body = 2, tail = 3 |
| packet | 1 | unicast = 0, multicast = 1 |
| routing | 1 | MU = 0, DP = 1 |
| src | 6 | source label |
| dst | 6 | next target (unicast destination, or representative / next path node) |
| bit string | 64 | remaining multicast destinations |

Body and tail flits carry the 2-bit flit type and a 78-bit payload. The three
of them carry the 234-bit payload of a core request.

## Network interface (`dpm_ni`): where multicast happens

The routers only carry unicast-style packets to the head's `dst`. All
multicast behaviour lives in the network interfaces.

**Sending.**
* A unicast request becomes one packet.
* A multicast request goes through the node's DPM engine. Each final partition
  becomes one packet to its R, with the partition as the bit string and MU or
  DP in the routing field.

**Receiving.** A packet is reassembled in a per-VC buffer and delivered to the
core. If it is a multicast and its bit string still has destinations other
than this node, the interface forwards it:

* **MU:** one unicast per remaining destination, lowest label first.
* **DP:** one packet to the lowest remaining label above this node, carrying
  all the remaining destinations above it. A second packet goes to the
  highest remaining label below this node, carrying all the remaining
  destinations below it.
  * At R both halves are usually non-empty, and this is the dual-path split.
  * At later nodes on a path only one half is left, so the packet moves on to
    the next destination.

`dlv_mcast` reports the type of the packet that arrived. A destination reached
by the unicast leg of an MU partition therefore sees a unicast from the
original source (`dlv_src`), not a multicast.

**Buffer release.** The receive buffer and its four credits return to the
router only when both delivery and forwarding are finished.

**Output order.** The interface picks its next packet in this order:
1. forwarding;
2. partitions from the engine;
3. new unicasts.

A packet's VC class comes from its destination label. Inside the class, the
two VCs alternate from packet to packet.

## Router (`dpm_router`)

The router is input-queued and wormhole-switched. It has five ports: L, N, E,
S and W. Each input port has 4 VCs with 4-flit buffers, and flow control uses
credits. Each clock:

* **VC allocation.** A head flit at the front of an idle input VC is routed and
  asks for a free output VC of its class. Each output grants one request per
  clock, round robin.
* **Switch allocation.** This is separable round robin. Each input offers one
  ready VC that has a downstream credit. Each output accepts one input.
* **Traversal.** The winning flit goes into the output link register, and a
  credit goes upstream.

A tail flit frees its output VC. The head of a packet spends 3 clocks per hop:
buffer write, VC allocation, then switch allocation plus link. Body flits
follow one per clock. A packet ejected to the local port keeps its VC class.

## Top level (`dpm_noc`)

The top builds an 8x8 array of routers and interfaces. Nodes are indexed by
label, and each router/interface pair gets its label through a constant `node`
input. The top's ports are per-node arrays of plain signals:

* **Requests:** `req_valid`/`req_ready`, plus `req_mcast`, `req_dst`,
  `req_mask` and `req_payload`.
* **Deliveries:** `dlv_valid`/`dlv_ready`, plus `dlv_src`, `dlv_mcast` and
  `dlv_payload`.

Links at the mesh edge are tied off. The parameters (`MESH_N=8`, `NUM_VC=4`,
`BUF_DEPTH=4`, `PKT_FLITS=4`) are in `dpm_pkg`. `COST_W=12` is this design's
own sizing: the largest cost of 16 destinations × 14 hops fits easily.

## Where this design departs from, or adds to, the published scheme

* **S→R hops in the cost.** Explained above.
* **Worked-example result.** P4P5P6 is merged, not P4P5 plus P6, as explained
  above.
* **Travel from S to R.** The published text says packets go to R by XY
  routing. Here every packet, including the trip to R, uses the label
  routing of its subnetwork. XY routing in the same VCs would break the
  high/low channel ordering that keeps the network deadlock-free. The hop
  count is the same, since both are minimal.
* **Tie rules.** On equal savings, the scheme prefers the candidate with
  fewer basic partitions, then the lower starting partition, and the engine
  does the same. When Ct equals Cp the scheme picks MU, and so does the
  engine. One tie rule is this design's own: among destinations equally near
  to S, the one with the lowest label becomes R.
* **Forwarding at each destination.** Forwarding is done by whole-packet
  re-injection from the interface. The scheme does not describe how a path
  node passes the packet on. An interface waits for room in its network
  buffers before it frees its receive buffer. Under heavy multicast load,
  this absorb-and-forward step could in principle form a cycle of interfaces
  that wait on each other. The end-to-end test runs at a low load (2% per node
  per clock) and does not show it. No injection-rate sweep to saturation was
  done.
* **Router microarchitecture.** This is all this design's own. The scheme fixes
  only the routing rule and the VC split.
* **Not modelled.**
  * The cores and caches that generate benchmark traffic.
  * Power estimation.
  * Replay of the benchmark traces.

  The testbench drives the request ports with synthetic traffic instead.

## Testbenches

Each `tb/tb_<module>.sv` is self-checking. It ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/dpm_ref_pkg.sv` is a
separate reference model written directly from the algorithm's definitions.
It covers labels, label routing, partitions, costs and the full greedy
selection.

| testbench | what it checks |
|---|---|
| `tb_dpm_partition_classifier` | every source; random and single-destination sets; against the reference |
| `tb_dpm_cost_unit` | random partitions; R, Ct, Cp, cost and MU/DP; worked-example costs |
| `tb_dpm_engine` | random sets; exact partition list, order and latency; worked example |
| `tb_dpm_route_unit` | all 4096 pairs; the hop walk reaches the destination in Manhattan distance, with monotonic labels |
| `tb_dpm_vc_fifo` | random push/pop against a queue model |
| `tb_dpm_router` | random packets on all ports and VCs; output port, VC class, flit order, 3-clock head latency, credit back-pressure |
| `tb_dpm_ni` | packet formation, per-partition multicast packets, DP split, MU forwarding, credit hold during a delivery stall |
| `tb_dpm_noc` | full 8x8 network; see below |

**`tb_dpm_noc`** first sends the worked example. It then drives random traffic
from all 64 cores: 90% unicast and 10% multicast, with sets drawn from the
destination ranges 2-5, 4-8, 7-10 and 10-16. Cores accept deliveries on only
90% of clocks. A scoreboard requires every destination to receive each packet
exactly once, with the right source and payload. The testbench also counts how
often each mechanism happened, and fails if any never did:

* merges;
* DP and MU partitions;
* two-way DP splits;
* DP and MU forwards;
* both subnetworks;
* output-VC waits;
* injection credit stalls;
* delivery stalls.

In one run of the full-network test:

* The worked example reached all ten destinations 94 clocks after injection.
* The random phase made 3434 unicast and 392 multicast requests, giving 6421
  deliveries, all correct.
* Mechanism counts:
  * 361 merges;
  * 392 DP and 529 MU partitions;
  * 163 two-way splits;
  * 1749 DP and 317 MU forwards;
  * 2750 output-VC waits;
  * 94 injection credit stalls;
  * 679 delivery stalls.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/dpm_pkg.sv tb/dpm_ref_pkg.sv $(ls rtl/*.sv | grep -v dpm_pkg) tb/tb_dpm_engine.sv \
  --top-module tb_dpm_engine -Mdir obj -o sim
./obj/sim
```

Use the same command with another `tb_*` as the top module. `-Wno-fatal` keeps
width warnings in the testbenches from stopping the build; the RTL itself is
clean under Verilator's default lint. The full-network
testbench builds a large model, so its C++ compile takes several minutes.
