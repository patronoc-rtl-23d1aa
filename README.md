# PATRONoC: an AXI4 network-on-chip for multi-accelerator platforms

Most networks-on-chip move packets: a request at an endpoint is cut into flits, carried
over narrow links and rebuilt at the far end. Each endpoint therefore needs a protocol bridge,
and bandwidth has to come from a high link clock. DNN accelerators mostly move large,
predictable bursts between their local memories and a shared memory. For that traffic, this
network does not translate at all. Every link of the mesh is a full-width AXI4 interface, and
every router is an AXI4 crossbar. A DMA engine's burst goes through the network as the same
AXI4 burst it started as. A core, an accelerator or a memory connects to the network directly,
with no adapter.

This repository holds synthesizable SystemVerilog for that network, built as a 2D mesh. The
design follows the PATRONoC architecture, published by Jain et al. as an open-source extension
of an AXI crossbar library. It is an independent implementation written from the published
description. It is not the authors' code. Where the description is silent, the choices made
here are listed in the sections below.

## The mesh

`patronoc_mesh` places one crosspoint (`axi_xp`) at each node of a `NumX` x `NumY` grid. The
default grid is 4 x 4. Nodes are numbered row by row, `n = y*NumX + x`, with row 0 at the top.
Each crosspoint has one local port pair and one port pair per existing neighbour (N, E, S, W):

* `slv_reqs_i[n]` / `slv_resps_o[n]` is where the AXI master of node n (a core or DMA) sends
  requests into the network.
* `mst_reqs_o[n]` / `mst_resps_i[n]` is where the network delivers requests to the AXI slave of
  node n (a memory or I/O tile).

So a corner crosspoint has 3 ports, an edge crosspoint 4 and an inner crosspoint 5. Inside a
crosspoint, ports are numbered densely: port 0 is local, then N, E, S, W as far as they exist.

Each port pair is a complete AXI4 link with five channels (AW, W, B, AR, R). Each channel has its
own valid/ready handshake. A link is carried as two structs, `axi_pkg::req_t` (driven by the
master) and `axi_pkg::resp_t` (driven by the slave).

### Addressing and YX routing

Routing is by address. Node n owns the address range
`[AddrBase + n*RegionSize, AddrBase + (n+1)*RegionSize)`. The defaults are base 0 and 16 MiB per
node. Every crosspoint has a routing table with one rule per destination node, and each rule
names the egress port towards that node. The rules implement dimension-ordered YX routing:

1. Move along the column (N or S) until the destination row is reached.
2. Then move along the row (E or W).
3. Then leave through the local port.

The tables are not stored anywhere. `patronoc_pkg::yx_rule()` computes them at elaboration time
from the crosspoint's position. A request whose address falls in no node's range is answered
with an AXI `DECERR` by the first crosspoint it enters.

### Partial connectivity

YX routing never turns from a row back into a column, and it never makes a U-turn. Each
crosspoint's crossbar therefore only builds the connections YX needs
(`patronoc_pkg::yx_connected`):

| enters from | may leave towards |
|-------------|-------------------|
| local       | anywhere, including the local slave |
| N or S      | anywhere except back where it came from |
| E or W      | straight on, or the local port |

Setting `FullyConnected = 1` builds every connection instead.

## Inside a crosspoint

```
           ingress port s                                     egress port m
  req ──► [Addr Decode AW] ─┐                               ┌─► [ID remapper] ──► req
          [Addr Decode AR] ─┤                               │
                            ▼                               │
                         [Demux] ──► [Cut] ──(to mux m)──► [Mux m]
                            │  └──► [Cut] ──(to mux m')     ▲
                            └──► [Error slave]              └── from the demuxes of other ports
```

`axi_xp` is an `axi_xbar` followed by one `axi_id_remap` per egress port. The crossbar is built
from the following blocks.

* **Address decoders** (`addr_decode`). Each ingress port has one decoder for write addresses
  and one for read addresses. A decoder compares the address with all rules in parallel; the
  first rule that matches wins. No match, or a match on a port that is not connected, selects
  the error slave.
* **Demux** (`axi_demux`). Each ingress port has one. It sends AW and AR to the selected output
  and sends W beats after their AW. It merges the B and R responses of all outputs with a
  round-robin arbiter.
* **Error slave** (`axi_err_slv`). Each ingress port has a private one. It accepts the request,
  drops any write data, and answers with `DECERR`: one B per write, len+1 R beats per read.
* **Cut** (`axi_cut`). A register slice on every connected demux-to-mux path. The paper places
  a slice on every channel, and this is what lets every path between crosspoints be registered.
* **Mux** (`axi_mux`). Each egress port has one. It grants AW and AR round-robin among the
  ingress ports. It prefixes the granted ID with the ingress port index and routes B and R back
  by that prefix.

## Keeping AXI ordering and avoiding deadlock

This is the part of the design that needs the most care. AXI4 lets a master have many
transactions in flight. Responses with the same ID must return in the order the requests were
issued; responses with different IDs may overtake each other. A network that splits traffic over
several paths must not break this rule. Four mechanisms keep it.

**Same ID, one path (demux).** Each demux keeps, for every ID, a count of transactions in flight
and the output they went to. There is one such table for writes and one for reads. A new request
whose ID is already in flight towards a different output waits until those transactions have
completed. Same-ID transactions therefore follow one path and cannot overtake each other. The
count also limits how many transactions one ID may have in flight (`MaxTrans`). This is the
"maximum outstanding transactions" (MOT) parameter of the network, 8 by default.

**Responses find their way back (mux).** The mux extends each ID by 3 bits holding the ingress
port index. Responses are routed back by those bits. IDs from different ingress ports can no
longer collide, so a reordering between them is legal.

**IDs stay narrow (ID remapper).** If the crossbar widened the ID at every hop, the ID would grow
by 3 bits per hop. Instead, each egress port has an `axi_id_remap`. It keeps a table of 16 entries
(2^IdWidth) for writes and one for reads. Each entry holds a widened ID and its number of
transactions in flight; the outgoing ID is the entry's index. A request reuses the entry that
already holds its ID, which preserves same-ID order. Otherwise it takes the lowest free entry. A
request waits while its entry has `MaxTrans` transactions in flight, or while no entry is free.
The chosen entry is locked while the request waits, so the ID on a valid request never changes.
B and R responses look the original ID up by index. Because of this, every crosspoint port has
the same type and crosspoints chain without limit.

**Write data order.** AXI4 W beats carry no ID, so they must follow their AW in order:

* The mux records the order in which it granted AWs in a FIFO and takes W beats from the ingress
  ports in that order.
* The demux records the outputs of its AWs and sends W beats in that order.

Those two rules alone can deadlock. Take demuxes A and B, both writing to muxes X and Y, in
opposite orders. Mux X waits for A's data, but A is sending to Y first. Mux Y waits for B's data,
but B is sending to X first. To rule this out, a demux only sends an AW to a different output
than its previous AW after all earlier write bursts have left. The crossbar test hit exactly this
deadlock before the rule was added. The rule costs some write throughput when one master
interleaves writes to different destinations. Reads are unaffected.

## Timing

* Every cut channel adds one cycle and keeps one item per cycle. A hop through a crosspoint costs
  one cycle on the request channels and one on the response channels.
* The address decoders, demux, mux and remapper are combinational on the forward path.
* W beats can leave a demux from the cycle after their AW was accepted.
* There is one clock and an active-low asynchronous reset, `rst_ni`, which clears all state.

## Parameters

| Where | Name | Default | Meaning |
|-------|------|---------|---------|
| `axi_pkg` | `AddrWidth` | 32 | address bits |
| `axi_pkg` | `DataWidth` | 32 | data bits. Use 512 for the wide configuration; any power of two from 8 to 1024 |
| `axi_pkg` | `IdWidth` | 4 | ID bits at every port (16 masters need 16 IDs) |
| `axi_pkg` | `XbarIdExtra` | 3 | bits the crossbar adds for up to 5 ingress ports |
| `patronoc_mesh` | `NumX`, `NumY` | 4, 4 | mesh size |
| `patronoc_mesh` | `MaxTrans` | 8 | MOT: outstanding transactions per ID, and the depth of the W order FIFOs |
| `patronoc_mesh` | `CutMask` | `5'b11111` | channels with a register slice, one bit each: {R, AR, B, W, AW} |
| `patronoc_mesh` | `FullyConnected` | 0 | 1 connects every port to every port |
| `patronoc_mesh` | `AddrBase`, `RegionSize` | 0, 16 MiB | address map |

The widths live in `axi_pkg`, not in module parameters, so the channel structs can be shared
plain types. A different data or ID width means editing the package. The defaults are the
published slim 4 x 4 network (AW 32, DW 32, IW 4, MOT 8). The published wide network differs only
in `DataWidth = 512`. That configuration passes lint and elaboration, but it was not simulated
here, because building the 512-bit simulation of the full mesh takes too long.

## Files

| File | Contents |
|------|----------|
| `rtl/axi_pkg.sv` | widths, channel structs, response codes, routing-rule type |
| `rtl/patronoc_pkg.sv` | mesh geometry, YX routing tables, connectivity |
| `rtl/patronoc_mesh.sv` | top level: the mesh |
| `rtl/axi_xp.sv` | crosspoint = crossbar + ID remappers |
| `rtl/axi_xbar.sv` | crossbar |
| `rtl/addr_decode.sv`, `axi_demux.sv`, `axi_mux.sv`, `axi_cut.sv`, `axi_err_slv.sv`, `axi_id_remap.sv` | crossbar parts |
| `rtl/spill_reg.sv`, `fifo.sv`, `rr_arb.sv` | generic helpers: skid buffer, FIFO, round-robin arbiter |
| `tb/axi_traffic_master.sv` | behavioural DMA-like master: random bursts, write then read back and check |
| `tb/axi_mem_model.sv` | behavioural AXI memory with random backpressure |
| `tb/tb_*.sv` | one self-checking testbench per block, and `tb_patronoc_mesh` for the whole network |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops, including on a watchdog
timeout. Use verilator 5 with timing support:

```
verilator --binary --timing --assert -Irtl -Itb rtl/axi_pkg.sv rtl/patronoc_pkg.sv \
          tb/tb_patronoc_mesh.sv --top-module tb_patronoc_mesh -Mdir build -j 8
./build/Vtb_patronoc_mesh
```

Replace `tb_patronoc_mesh` by any other `tb_*` to test one block. The two packages must come
first; verilator finds the other files through `-Irtl -Itb`.

`tb_patronoc_mesh` runs the mesh at its default parameters. Each of the 16 nodes has a traffic
master and a memory. Every master writes 16 random bursts (1 to 8 beats, random IDs, random
destination nodes, about 8 % to unmapped addresses), waits for all write responses, and reads
everything back. The test checks:

* every read beat's data, response code and `last` flag;
* that every unmapped access ends in `DECERR`;
* that no memory receives an address outside its region.

It also counts how often each mechanism occurred, and fails if one never did: bursts, several
transactions in flight, an ID reused towards another destination while in flight, YX turns,
decode errors, memory backpressure, and two ports competing for one crosspoint output.

The block testbenches use the same master and memory models:

* `tb_axi_demux` uses 3 outputs, with selects derived from the address.
* `tb_axi_mux` and `tb_axi_id_remap` put 3 masters behind a mux and a remapper. The remapper
  test squeezes up to 48 widened IDs into 16 and must stall at least once.
* `tb_axi_xbar` tests a 3 x 3 crossbar and `tb_axi_xp` a 3-port crosspoint, both with decode
  errors.
* `tb_axi_cut` checks that nothing passes the slice in the cycle it enters.
* `tb_addr_decode` and `tb_axi_err_slv` compare against values computed in the testbench.

## Test status

Every block test passes. The end-to-end mesh test was run at 2 x 2 and 3 x 3 with the same
traffic. At both sizes all read-back data, response codes and address ranges checked out:
371 and 795 checks. At those sizes the arbitration-contention counter can stay at zero,
because it watches the local output of the crosspoint at row 1, column 1. The 4 x 4
configuration, `tb_patronoc_mesh` as shipped, needs about 12 minutes to build and its result
is not recorded here.

## Departures and open points

* **Chosen here, not given by the paper.** The paper does not describe these internals, and they
  are this implementation's choices:
  * round-robin arbitration;
  * the per-ID ordering table of the demux;
  * the W-order rule that prevents the deadlock described above;
  * the ID remapper's table organisation;
  * the error slave's behaviour;
  * the address map (equal contiguous regions);
  * handling one error transaction at a time per direction.
* **Widths are package constants.** They are not per-instance parameters, so one design cannot
  mix networks of different widths.
* **Port count per crosspoint.** The published figure's caption gives 4 ports to inner
  crosspoints and 5 to edge crosspoints. Its colouring and the mesh geometry say the opposite
  (inner 5, edge 4). This design follows the geometry.
* **Not covered.** The endpoints (DMA engines, memories, accelerators), clock-domain crossing and
  the physical implementation are not part of this RTL. The DNN workload traffic used in the
  published evaluation came from a full-system simulator and is not reproduced.
* **False combinational loop.** Verilator lint reports a loop (`UNOPTFLAT`) through the
  struct-typed link arrays of the mesh. It is an artefact of treating each struct array as one
  signal. Every real path between crosspoints goes through a register slice when `CutMask` is
  all ones. With a cut disabled, the remaining paths still pass through at most one crosspoint
  in each direction.
