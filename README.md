# DeFT routing for a 2.5D chiplet network — SystemVerilog model

## The problem

A 2.5D system places several chiplets, each with its own on-chip mesh network, on an
interposer that has a network of its own. A chiplet reaches the interposer only through a
few vertical links (VLs): bundles of microbumps that join a *boundary router* on the
chiplet to a router on the interposer. This raises two problems:

* **Deadlock across chiplets.** Each mesh may be deadlock-free alone (XY routing, for
  instance), but packets that go down from one chiplet, cross the interposer and go up into
  another can close a cycle of buffer dependencies through several chiplets.
* **Faulty VLs.** Microbumps fail (mismatch, electromigration, thermomigration). Earlier
  schemes break the deadlock by restricting which VL a packet may use. That leaves no
  alternative when the one allowed VL breaks.

DeFT separates the traffic into two virtual networks (VNs), so that **any** working VL may
be used. It also picks VLs from a table, made at design time, that balances load and
distance for every fault pattern.

## The system modelled

The baseline system has four chiplets, each a 4x4 mesh, on an active interposer that is
itself a 4x4 mesh. That gives 80 routers; each chiplet router serves one processing element.

```
      chiplet 0           chiplet 1            each chiplet (router index y*4+x):
   +-----------+       +-----------+            0  [1]  [2]  3      [k] = boundary router
   |  4x4 mesh |       |  4x4 mesh |            4   5    6   7          with VL k-1...
   +--VL0..VL3-+       +--VL0..VL3-+            8   9   10  11      VL0 at (1,0)  VL1 at (2,0)
        ||                  ||                 12 [13] [14] 15      VL2 at (1,3)  VL3 at (2,3)
   +----------------------------------+
   | interposer 4x4 mesh: the 2x2      |      interposer (x,y): chiplet c's VL k lands at
   | quadrant under each chiplet takes |        x = 2*(c mod 2) + (k mod 2)
   | that chiplet's four VLs           |        y = 2*(c div 2) + (k div 2)
   +----------------------------------+      DRAM ports: interposer corners
```

Each chiplet connects through four bidirectional VLs at routers (1,0), (2,0), (1,3) and
(2,3). These VLs land on the 2x2 group of interposer routers under the chiplet. DRAMs sit
at the four corner routers of the interposer. Every router has six ports: Local, North,
East, South, West and one Vertical port. The Vertical port is called *Down* on a chiplet
and *Up* on the interposer. Links carry 32-bit flits; a packet is eight flits. Each input
port has two virtual channels (VCs) of four flits each, one VC per VN.

## How a packet travels

An inter-chiplet packet passes through two intermediate destinations:

1. At injection, the source router looks up the VL to use on its own chiplet in the VL
   table. The index is the current fault mask of the chiplet and the router's own index.
   The router writes the answer into the head flit (`sel1`). The packet then follows XY
   routing to that boundary router and goes down.
2. The interposer router where the packet arrives looks up the VL of the destination
   chiplet. The index is that chiplet's fault mask and the destination router's index.
   The answer goes into `sel2`. The packet follows XY routing on the interposer to the
   landing point of that VL and goes up.
3. On the destination chiplet, XY routing takes the packet to its final router.

Intra-chiplet packets use XY routing only. Packets to or from a DRAM skip the chiplet leg
they do not need.

## Why it cannot deadlock: the VN rules

The VN a packet is in is the VC it occupies. Three rules apply:

| Rule | Forbidden |
|------|-----------|
| 1 | moving from VN.1 back to VN.0 |
| 2 | in VN.0: turning from an Up port (coming off the interposer) to a Horizontal port |
| 3 | in VN.1: turning from a Horizontal port to a Down port (going onto the interposer) |

Rule 2 means VN.0 never carries a packet from the interposer into a chiplet mesh. Rule 3
means VN.1 never carries a packet from a mesh onto the interposer. So neither VN can hold
a dependency cycle that runs through two chiplets. Rule 1 means there is no cycle between
the two VNs either.

`vn_assign` applies the rules as follows:

| Where | Situation | VN given |
|-------|-----------|----------|
| source router | on the interposer (DRAM), or an intra-chiplet packet, or a boundary router sending straight down its own VL | round robin 0/1 |
| source router | inter-chiplet packet that first moves horizontally | VN.0 |
| boundary router | leaving by the Down port, packet in VN.0 | round robin 0/1 |
| boundary router | arriving by the Up port | VN.1 |
| anywhere else | — | unchanged |

A packet that goes down in VN.0 can still enter the destination chiplet, because the
boundary router there moves it to VN.1. As a result, both VNs carry traffic within a
chiplet and both carry traffic on the interposer, so the VCs are used evenly.

One case departs from the literal algorithm: a boundary router whose table entry names
*another* router's VL. The source rule would give such a packet a round-robin VN. This
model gives it VN.0 instead, because the packet first travels horizontally and would break
Rule 3 if it were in VN.1. The router checks Rule 1 with an assertion. The unit testbench
checks all three rules exhaustively.

## The VL-selection table

Each router has a table with one entry per fault scenario of its chiplet's four VLs. The
fault mask is 4 bits, so there are 16 entries. Fourteen are the patterns with one to three
broken VLs. One is the fault-free case. The last, all four broken, leaves the chiplet
disconnected and has no valid answer. The table contents come from an offline
optimisation. For each scenario, over all assignments *s* of the 16 routers to working VLs,
minimise

    C_s = sum over working VLs v of ( rho * D_v + |l_v - l_avg| / l_avg ),   rho = 0.01

* `l_v` is the inter-chiplet traffic of the routers that use VL `v`. The table assumes
  uniform traffic, so `l_v` is proportional to their number.
* `l_avg` is the mean of `l_v` over the working VLs.
* `D_v` is the sum of Manhattan distances from those routers to `v`.

The load term dominates: it asks for an even split first, then the shortest distances.
`rtl/vl_select_lut.mem` holds the result. There are 256 two-bit entries, at address
`{fault_mask[3:0], router_index[3:0]}`. The minimum was found exactly, by dynamic
programming over the count of routers per VL, keeping the smallest total distance for each
count vector. The testbench computes the minimum again in SystemVerilog and checks that the
table reaches it in every scenario. Some examples:

| broken VLs | routers per working VL | cost |
|------------|-----------------------|------|
| none | 4/4/4/4 (the four quadrants) | 0.16 |
| VL3 | 5/5/6 | 0.46 |
| VL2, VL3 | 8/8 | 0.32 |
| three | 16 | 0.40 |

To use a different traffic profile, recompute the table and replace the `.mem` file. The
hardware stays the same.

## Router microarchitecture

The method itself fixes only the ports, the two VCs, the buffer depth and the
flit and packet sizes. The rest of `deft_router` is this model's own, simple design:

* **Input buffers.** Each input port has one four-flit `vc_fifo` per VC. The `vn` bit of an
  arriving flit selects the buffer it enters.
* **Route and VN.** Each input VC has its own `route_compute` and `vn_assign`, which work
  on the head flit at the front of its buffer.
* **Allocation.** Allocation takes one combined step:
  * A head flit is eligible when the output VC it needs is free and has a credit. A body
    or tail flit is eligible when the output VC its packet holds has a credit.
  * Each input port picks one eligible VC, round robin.
  * Each output port grants one of the requesting input ports, round robin.
  * A head reserves its output VC and the tail releases it (wormhole switching).
* **Output.** The granted flit is popped and given its new VN. A head flit also gets its
  filled-in `sel1`/`sel2`. The flit is then registered onto the output link.
* **Timing.** A lone packet's head leaves a router two cycles after it arrives. After that,
  one flit follows per cycle.
* **Flow control.** Credits are counted per output VC, starting at four. The receiver
  returns a one-cycle credit pulse per VC for every flit it pops.

The link bundle is `link_t` = {valid, flit}. The flit is `flit_t` = {head, tail, vn,
data[31:0]}. Credits travel back as `logic [1:0]` per port. The head flit's 32 data bits
are laid out as `head_t`:

| bits | field | bits | field |
|------|-------|------|-------|
| 31:29 | destination layer (chiplet, 7 = interposer) | 18:16 | source layer |
| 28:26 | destination x | 15:13 | source x |
| 25:23 | destination y | 12:10 | source y |
| 22:21 | `sel1` (VL on the source chiplet) | 9:0 | free tag |
| 20:19 | `sel2` (VL on the destination chiplet) | | |

## Files

| File | Contents |
|------|----------|
| `rtl/defft_pkg.sv` | sizes, flit/link/head types, port enum, VL geometry functions |
| `rtl/vc_fifo.sv` | four-flit VC buffer |
| `rtl/vl_select_lut.sv`, `rtl/vl_select_lut.mem` | VL-selection table |
| `rtl/vn_assign.sv` | VN assignment (the three rules) |
| `rtl/route_compute.sv` | intermediate destinations and XY output port |
| `rtl/deft_router.sv` | six-port, two-VC router |
| `rtl/mesh_layer.sv` | a chiplet or the interposer as a mesh of routers |
| `rtl/vertical_link.sv` | behavioural model of one VL that can be broken (simulation only) |
| `rtl/deft_system.sv` | top: four chiplets, interposer, sixteen VLs |

The top, `deft_system`, exposes:

* the Local ports of all 64 chiplet routers (`pe_*`; node = chiplet*16 + y*4 + x);
* the Local ports of all 16 interposer routers (`ip_*`; node = y*4 + x; the DRAMs use the
  corners);
* the VL fault masks (`vl_fault[c][k]`);
* a count of flits lost on each VL (`vl_lost`, simulation only).

The processing elements and the DRAMs are not modelled; their ports are the top's ports.
`vl_fault` does two things. It opens the behavioural link, so that any flit sent over it is
lost. It also steers the routers' table look-ups away from the broken link. A correct
network therefore never loses a flit.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. From the
directory that holds `rtl/` and `tb/` (the `.mem` file is read by a path relative to it):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/defft_pkg.sv tb/tb_deft_system.sv \
          --top-module tb_deft_system -Mdir obj && obj/Vtb_deft_system
```

| Testbench | What it does |
|-----------|--------------|
| `tb_vc_fifo` | random traffic against a queue model |
| `tb_vl_select_lut` | every entry avoids broken VLs; every scenario reaches the independently computed minimum cost; the fault-free split is the four quadrants |
| `tb_vn_assign` | every input combination against the algorithm and the three rules |
| `tb_route_compute` | three router kinds with random heads and fault masks against a reference |
| `tb_deft_router` | one boundary router under load. Checks: packet integrity, output port, allowed VN, a 2-cycle zero-load latency, back-pressure, re-routing around a broken VL |
| `tb_mesh_layer` | one chiplet: intra-chiplet delivery, and inter-chiplet packets leaving by the table's VL, with and without faults |
| `tb_vertical_link` | pass-through, open when faulty, loss count |
| `tb_deft_system` | the full 80-router system at its default size |

`tb_deft_system` drives 68 sources with 12 packets each, in three phases: no faults; four
broken VLs (one per chiplet) with slow sinks; eight broken VLs. It checks that every packet
arrives intact at its destination and that no flit is lost. It also requires each mechanism
to occur: both VNs used for intra-chiplet packets, going down and going up; packets steered
to a non-default VL; and stalls. Building this testbench with verilator takes several
minutes; the simulation itself takes seconds.

## How far to trust it, and where it departs

* **Taken from the method:** the two-VN scheme and its three rules, the VN-assignment
  algorithm, two intermediate destinations per inter-chiplet packet, the fault-scenario VL
  table and its cost function with rho = 0.01, uniform-traffic optimisation, and the
  network sizes (4 chiplets of 4x4, 4 VLs each, 2 VCs, 4-flit buffers, 8-flit packets,
  32-bit flits).
* **Read from drawings:** the VL positions on a chiplet, the interposer as a 4x4 mesh with
  one VL per router in a quadrant under each chiplet, and the DRAMs at the interposer
  corners.
* **Chosen here:**
  * XY routing within each layer;
  * where the two table look-ups happen;
  * the head-flit layout;
  * the whole router pipeline and allocator;
  * credit flow control and one-cycle links;
  * synchronous active-low reset;
  * VN.0 for a boundary source whose table entry is another VL (see above).
* **The table:** the search is exact, but ties are broken arbitrarily. With VL3 broken,
  for example, routers 10 and 11 go to VL1 and VL2. An equally cheap alternative is
  swapped.
* **Table storage:** each route-compute unit holds the whole 256-entry table, so a router
  carries twelve copies of it. That is simple but wasteful: a chiplet router needs only
  its own 16 entries.
* **Not modelled:**
  * the six-chiplet variant (the interposer layout for it is unknown);
  * how faults are detected and the masks distributed;
  * serialised VLs;
  * a disconnected chiplet (all four VLs broken), whose packets cannot be delivered;
  * cores, caches and DRAMs.
* **Not reproduced:** the area and power figures (router area 46651 um^2 and 11.69 mW at
  45 nm, 1 GHz). Latency numbers are not reproduced either; this model's cycle timing
  belongs to its own router, not to the simulator used for the method's evaluation.
