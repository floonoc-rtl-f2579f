# A wide-link AXI network-on-chip for a mesh of compute tiles

This RTL implements a 2D-mesh network-on-chip (NoC) that carries AXI4 traffic
between compute tiles and moves every AXI beat in a single flit, in a single
cycle. Many-core accelerators move two very different kinds of traffic:

* short, latency-sensitive accesses from cores (64-bit, mostly single beats);
* long DMA bursts (512-bit) that need as much bandwidth as the memory system
  can deliver.

Classical NoCs serialise a packet over several narrow flits and raise the link
clock to compensate. This design does the opposite. The links are as wide as
the AXI buses at their ends, so a NoC link has the same bandwidth as the AXI
port that feeds it at the same clock. At 512 data bits per cycle and about
1.26 GHz this is about 645 Gbit/s per link and direction. Routing, ordering
and payload-type information travels on extra parallel header wires, not in
separate head or tail flits.

The second idea is how AXI ordering is kept without a reorder buffer in the
network interface. Its cost is small: per AXI ID, one counter and one stored
destination. The section "Ordering without a reorder buffer" explains it.

The design is written in SystemVerilog (IEEE 1800-2017), synthesizable, and
checked with Verilator and the slang front end of Yosys.

## Contents

| File | Module | Role |
|------|--------|------|
| `rtl/floo_pkg.sv` | package | widths, header, AXI channel structs, link bundles |
| `rtl/floo_fifo.sv` | `floo_fifo` | 2-entry valid/ready FIFO (router and NI buffers) |
| `rtl/floo_rr_arb_tree.sv` | `floo_rr_arb_tree` | round-robin arbiter built as a binary tree |
| `rtl/floo_route_xy.sv` | `floo_route_xy` | dimension-ordered (x, then y) route computation |
| `rtl/floo_router.sv` | `floo_router` | one 5x5 router for one link type |
| `rtl/floo_nw_router.sv` | `floo_nw_router` | three routers side by side: req, rsp, wide |
| `rtl/floo_rob_less.sv` | `floo_rob_less` | per-ID outstanding counter with destination check |
| `rtl/floo_meta_buffer.sv` | `floo_meta_buffer` | return information for requests served locally |
| `rtl/floo_nw_chimney.sv` | `floo_nw_chimney` | narrow/wide AXI network interface (NI) |
| `rtl/floo_tile.sv` | `floo_tile` | NoC part of one tile: NI plus router |
| `rtl/floo_mesh.sv` | `floo_mesh` | the top: 8 rows x 4 columns of tiles plus HBM-side NIs |

## Three physical links, one beat per flit

Between two neighbouring routers there are three independent links in each
direction. Each link has its own valid/ready handshake and its own router.

| Link | Width | Narrow AXI (64-bit) | Wide AXI (512-bit) |
|------|-------|---------------------|--------------------|
| `req`  | 119 | AW, W, AR | AR |
| `rsp`  | 103 | R, B | B |
| `wide` | 603 | - | AW, W, R |

Each flit is `{payload, header}`, with the header in the low 25 bits. The
header fields, from the LSB up, are:

| Field | Bits | Meaning |
|-------|------|---------|
| `dst_id` | 6 | destination node {y[2:0], x[2:0]} |
| `src_id` | 6 | sending node, used to address the response |
| `last` | 1 | 0 keeps the wormhole path open for the next flit |
| `rob_req` | 1 | reserved for a reorder-buffer NI, always 0 here |
| `rob_idx` | 6 | reserved, always 0 |
| `atop` | 1 | the flit belongs to an atomic operation |
| `axi_ch` | 4 | which AXI channel the payload is (`floo_pkg::axi_ch_e`) |

The payload is one complete AXI channel beat, as a packed struct cast into
the low bits of the payload field.

The link widths follow from the payloads:

* The wide link's largest payload is a 512-bit W or R beat plus its side
  fields: 578 bits, and 578 + 25 = 603.
* On the narrow side, the widest request beat is AW: 94 bits with a 5-bit ID
  and 6 user bits, and 94 + 25 = 119.
* The widest narrow response is R: 78 bits, and 78 + 25 = 103.

The AXI ID and user widths were chosen so that these sums land exactly on the
119- and 103-bit link widths.

Two consequences of this mapping are easy to miss:

* **Wide R shares the wide link with wide AW/W.** A tile's wide link carries
  both its DMA's write data and the read data it returns to other tiles. The
  NI arbitrates between them.
* **AW and W travel on the same link, as one packet.** W beats carry no AXI
  ID, so a target must receive each burst's W beats right after their AW,
  with no other burst's beats in between. The NI therefore sends AW with
  `last = 0` and the W beats behind it, the final beat with `last = 1`. Every
  router keeps an output locked to one input from a `last = 0` flit up to and
  including the `last = 1` flit (wormhole switching). All other flits are
  single-flit packets with `last = 1`. The same rule is used for narrow
  writes, which share the `req` link with AR.

## Ordering without a reorder buffer

AXI requires that responses with the same ID come back in request order.
Responses with different IDs may come back in any order. In a mesh with
static (deterministic) routing, two requests from the same source to the
same destination take the same path. Their responses also share one path,
so they return in order. Responses from different destinations can overtake
each other. The NI only has to prevent one case: requests with the same ID
outstanding at two different destinations at once.

`floo_rob_less` implements this rule. There is one instance for each of
narrow AW, narrow AR, wide AW and wide AR. For every AXI ID it keeps:

* the number of requests sent whose last response has not yet returned;
* the destination of those requests.

A new request with that ID is stalled in two cases:

* the count is non-zero and the new destination differs from the stored one;
* the count has reached `MaxTxns` (default 8).

Otherwise the request is sent, the count goes up, and the destination is
recorded. The count goes down on the B response for a write, or on the R beat
with `last` set for a read. The stall only holds back the AXI ready of that
channel. Other IDs and other channels keep moving.

The cost is a small counter per ID and no data storage. Throughput stays
high when the initiators use different IDs for independent streams. In the
intended system, each DMA back-end has its own ID and each core its own
narrow ID, so a stall only happens when one core or one DMA stream switches
destination while requests are still outstanding. The testbenches
demonstrate the stall and its release.

Atomic operations (AXI ATOPs, `aw.atop != 0`) bypass the counter. AXI already
requires an ATOP's ID to be unique among outstanding transactions, so it
cannot be reordered against anything.

### The target side and the meta buffer

When a request arrives from the NoC, the NI presents it on its AXI master
port to the local slave (a tile's L1 memory, or the HBM controller for the
west-boundary NIs). Two pieces of information must be kept until the
response is ready: the requester's node ID, and the original AXI ID.
`floo_meta_buffer` stores them.

* **Non-atomic requests** are all issued with AXI ID 0. The slave must then
  answer them in order, so the return information sits in a plain FIFO. The
  head of the FIFO always belongs to the next response: B for writes, the R
  burst for reads.
* **ATOPs** each get a free slot out of `NumAtop` (default 4) and are issued
  with ID `slot + 1`. Their responses may overtake the in-order stream. A
  response with a non-zero ID is looked up by slot. An ATOP that also
  returns data (`atop[5]` set) keeps its slot until both B and R are back.

There are four meta buffers per NI: narrow write, narrow read, wide write and
wide read. Only the two write buffers have ATOP slots.

## Network interface (`floo_nw_chimney`)

On the initiator side, the NI packs AXI beats from the tile into flits.

* `req` link: a 3-way round-robin arbiter chooses between:
  * narrow AW followed by its W beats;
  * narrow AR;
  * wide AR.

  While a narrow write burst is in progress only its W beats compete, so the
  packet is never split.
* `wide` link: a 2-way arbiter chooses between the wide AW+W packet of this
  tile's DMA and the wide R beats this tile returns as a target. R is masked
  while a wide write burst is in progress.
* `rsp` link: a 3-way arbiter chooses between narrow R, narrow B and wide B
  from the local slaves.

A flit's destination is taken from address bits `[45:40]` = {y, x}. Each
outgoing link has a 2-entry FIFO before it leaves the NI.

On the receiving side, each incoming link first passes through a 2-entry
FIFO. It is then split by the header's `axi_ch` field onto the AXI master
port (requests) or back to the AXI slave port (responses).

Timing:

* AXI handshake to flit on the outgoing link: 1 cycle.
* Flit on the incoming link to AXI valid: 1 cycle.
* A request and its response therefore spend 4 NI cycles in total, in
  addition to the routers.

Back-pressure uses valid/ready everywhere. Ready never depends
combinationally on the far side of a link, because every link ends in a
FIFO.

## Router (`floo_router`, `floo_nw_router`)

Each router has five ports: North, East, South, West and the local (Eject)
port, indexed 0 to 4 in that order. North is +y and east is +x.

A flit goes through these stages:

1. It enters a 2-entry input FIFO.
2. The head flit's route is computed from `dst_id` and the router's own
   coordinates, x first and then y.
3. Each output has a round-robin arbiter over the inputs that want it. The
   switch has no connection from a port to itself. It also has no North or
   South input to an East or West output, since x-first routing never turns
   that way.
4. The granted flit goes to a 2-entry output FIFO and then onto the link.

Each stage registers, so a hop costs 2 cycles. The output FIFO can be left
out with `EnOutBuf = 0`, which makes a hop 1 cycle.

The wormhole lock is held per output. After the output forwards a flit with
`last = 0`, its request mask admits only the same input until a flit with
`last = 1` has passed. An assertion checks that no flit asks for a removed
connection.

The arbiter (`floo_rr_arb_tree`) is a binary tree of 2:1 nodes, so its
depth is logarithmic in the number of inputs. Each leaf raises two
requests:

* a plain request;
* a priority request, if its index is at or after the round-robin pointer.

Each node forwards its priority request first, and then its left child.
After a handshake, the pointer moves to the granted index plus one. Every
waiting input is therefore served within `NumIn - 1` grants. While the
output is stalled (valid without ready) the decision is held, so data stays
stable.

`floo_nw_router` places three `floo_router`s side by side, one per link type.
They share nothing: a stalled `req` link does not hold up `rsp` or `wide`.

## Tile and mesh

`floo_tile` is the NoC part of one compute tile. The NI sits on the router's
local port. The tile's narrow and wide AXI ports, both as initiator and as
target, are ports of the module. The cluster itself (cores, L1 memory, DMA,
cluster crossbars) is not part of this RTL.

`floo_mesh` is the top. It has `NumY = 8` rows and `NumX = 4` columns of
tiles.

* **Tiles** are at x = 1..4 and y = 0..7.
* **West boundary (x = 0):** one NI per row connects straight to the west
  port of the row's first tile. Its AXI master ports are the HBM channels,
  one per row.
* **East boundary (x = 5):** the row's east links are module ports, for the
  host, peripherals and system memory. A test can attach another NI there.
* **North and south boundaries** are tied off: nothing comes in and the
  ready is 1. Assertions check that nothing is ever sent there.

Address map: bits `[45:40]` of an address select the node, as {y, x}. x = 0
is the row's HBM channel, x = 1..4 a tile's L1, and x = 5 the row's east
device.

The boundary NIs have no router of their own, and routing is x first. A
flit addressed to x = 0 or x = 5 therefore leaves the mesh in the row where
it travelled in x, which is its sender's row. This has two consequences:

* **A tile can reach only its own row's HBM channel and east device.** An
  assertion on each west NI catches a flit for another row.
* **Tile-to-tile traffic has no restriction.** Responses from the boundary
  NIs reach any tile.

### Latency

For a narrow read from a tile to its neighbour, the AR travels as follows:

| Step | Cycles |
|------|--------|
| NI of the sender | 1 |
| Router of the sender | 2 |
| Router of the target | 2 |
| NI of the target | 1 |
| **Total** | **6** |

* Each extra hop adds 2 cycles in each direction, so 4 per round trip.
* Tile (1,0) to tile (4,7) crosses 11 routers: 1 + 22 + 1 = 24 cycles for
  the request alone.
* The NoC part of a neighbour round trip is 12 cycles, plus the memory's own
  time.

The testbenches check the 6- and 24-cycle figures exactly.

## Where this design departs from the original description, and its own choices

* **Header width.** The published header lists dstID 6, srcID 6, tail 1,
  rob 1, robIdx 8, atop 1 and axi-ch 4 bits. That sums to 27 bits, but the
  header is stated as 25 bits, and 25 + 578 matches the 603-bit wide link.
  This design keeps 25 bits by giving the reorder index 6 bits. The reorder
  fields are unused here in any case.
* **Link total.** 119 + 103 + 603 = 825 wires per direction. One published
  figure prints 824.
* **NI latency.** The original description counts three NI cycles per
  narrow round trip. This design takes 4: one register stage per direction
  per NI.
* **Own choices:**
  * narrow ID 5 bits and user 6 bits; wide ID 3 bits and user 1 bit;
  * address bits `[45:40]` select the destination;
  * FIFO depth 2;
  * `MaxTxns = 8` per ID, an 8-entry meta FIFO, 4 ATOP slots;
  * port order and direction convention of the router;
  * the channel encoding in `axi_ch`.
* **Narrow writes** use the same AW+W wormhole bundling as wide writes.
* **Not built:**
  * the reorder-buffer variant of the NI;
  * source-based and table-based routing, and C2C-link integration;
  * everything inside the compute cluster, the HBM controller and PHY, and
    the east-side devices.

  The mesh brings out their connection points as ports.
* **Own-row restriction.** A tile reaching only its own row's HBM channel
  follows from the placement of the boundary NIs with x-first routing.

## Testbenches

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and stops, and it has a watchdog.

| Testbench | What it shows |
|-----------|---------------|
| `tb_floo_fifo` | order, full/empty, simultaneous push/pop under random traffic against a queue model |
| `tb_floo_rr_arb_tree` | fair share, a lone requester gets every grant, decision held under stall, no input waits more than N-1 grants |
| `tb_floo_route_xy` | all 4096 source/destination pairs against an independent x-then-y rule |
| `tb_floo_router` | 2-cycle hop, wormhole bursts never interleaved, random legal traffic delivered in per-path order with nothing lost |
| `tb_floo_nw_router` | the three links are independent; a blocked `req` output accepts only what its buffers hold |
| `tb_floo_rob_less` | stall on destination change and on saturation, release on completion, ATOP bypass, against a reference model |
| `tb_floo_meta_buffer` | FIFO order for non-atomics, ATOP slots answered out of order, full conditions |
| `tb_floo_nw_chimney` | one NI in loopback with memory models, covering: narrow and wide write and read-back; the 16-beat burst on consecutive cycles; `last` in the header; 2-cycle loopback latency; the ordering stall and its release; an ATOP returning old data; interleaved multi-ID wide reads |
| `tb_floo_tile` | two neighbouring tiles: 6-cycle neighbour latency, simultaneous traffic both ways, no stray flits |
| `tb_floo_mesh` | 2x2 mesh with HBM and east NIs: random pipelined narrow and wide bursts from every tile, read back with per-ID order checks, plus ATOPs. Each of these must occur at least once: ordering stall, wormhole lock, output contention, back-pressure, HBM access, east traffic |
| `tb_floo_mesh_full` | the default 8x4 mesh: all 32 tiles write and read back their row's HBM at once, a 24-cycle corner-to-corner request latency both ways, neighbour writes read back by all tiles together |
| `tb_floo_mesh_traffic` | the default 8x4 mesh under synthetic traffic: neighbor, transpose, bit-complement, uniform, shuffle and all-to-HBM, with 1, 2, 4, 8, 16 and 32 kB written per tile in 16-beat bursts. Neighbor reaches 42, 57, 70, 78, 83 and 86 % of the wide-link peak over these sizes. At 4 kB / 32 kB the others reach: bit-complement 19 / 23 %, uniform about 16 / 22 %, shuffle 19 / 21 %, transpose 14 / 16 %. With all tiles writing to their row's HBM channel, each row's HBM link is 74 % (1 kB) to 88 % (32 kB) busy. Every burst is answered and the last burst of each tile is read back |

`tb/tb_axi_mem.sv` is a behavioural AXI memory used as the target in these
testbenches. It stands in for L1, HBM and devices. It has optional random
throttling, keeps valid raised until the handshake, and executes ATOPs as
writes that return the old data.

The testbenches use `$urandom` only and reset everything they read, so they
also run on a two-state simulator.

To build and run one with Verilator 5, list the package, the RTL files the
block uses, the memory model when needed, and the testbench:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/floo_pkg.sv rtl/floo_fifo.sv rtl/floo_rr_arb_tree.sv rtl/floo_route_xy.sv \
  rtl/floo_router.sv rtl/floo_nw_router.sv rtl/floo_rob_less.sv \
  rtl/floo_meta_buffer.sv rtl/floo_nw_chimney.sv rtl/floo_tile.sv rtl/floo_mesh.sv \
  tb/tb_axi_mem.sv tb/tb_floo_mesh.sv --top-module tb_floo_mesh -Mdir obj_mesh
./obj_mesh/Vtb_floo_mesh +verilator+rand+reset+2
```

Build times:

* the 2x2 mesh test compiles in about a minute;
* the full 8x4 test takes about four minutes to compile and well under a
  second to run.

Synthesis of the full mesh is large: 32 tiles, each with three routers and
603-bit buffered links.

## Changing the design

* **Mesh size:** `NumX` and `NumY` on `floo_mesh`. Coordinates are 3 bits
  each, so at most 6 columns of tiles (x = 0 and x = NumX+1 are the
  boundaries) and 8 rows.
* **Outstanding transactions:** `MaxTxns`, `MetaDepth` and `NumAtop` on the
  NI and the tile.
* **Buffers:** `InDepth`, `EnOutBuf` and `OutDepth` on the routers.
* **Widths:** all widths live in `floo_pkg`. Changing an AXI width changes
  the payload and link widths. The `*PayloadW` constants must stay at least
  as large as the widest struct they carry.
