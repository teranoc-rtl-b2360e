# TeraNoC: a hybrid crossbar and mesh interconnect for a 1024-core shared-L1 cluster

Many simple cores work well together when they all read and write one shared L1 scratchpad
memory, word by word, with no caches to keep coherent. Crossbars give that memory a very low
latency, but a crossbar large enough for a thousand cores needs too many wires. A 2D mesh of
routers scales, but every hop adds cycles. TeraNoC uses each where it works best:

- **Crossbars inside a neighbourhood.** Inside a *tile*, 4 cores reach 16 banks in one cycle.
  Inside a *group*, 16 tiles reach each other's banks through 16x16 crossbars in 3 cycles.
- **A mesh between neighbourhoods.** The 16 groups sit in a 4x4 mesh. The mesh is not one
  network but 32 parallel word-wide networks ("planes"), so it has about as many channels as
  the tile boundary has ports.

This repository is synthesizable SystemVerilog of that interconnect at full size:

- 1024 core ports;
- 4096 single-cycle banks of 1 KiB each, 4 MiB in all;
- 64 routers per group: 32 request routers and 32 response routers.

The cores, their instruction caches and the wide DMA/AXI side network are not included. The
cluster brings out one request port and one response port per core, and the testbenches drive
these ports with a traffic model.

## Hierarchy and sizes

| Level | Module | Contents (default) |
|---|---|---|
| Hier-L0 | `tile` | M = 4 core ports, N = 16 banks of 256 x 32 bit, core-to-bank crossbar, 1 + K remote ports each way |
| Hier-L1 | `group` | Q = 16 tiles, tile-to-tile crossbars, remappers, 2·Q·K routers, K router-to-tile crossbars per direction |
| top | `teranoc_cluster` | 4 x 4 groups in a mesh, 1024 cores |

All sizes are parameters of `teranoc_pkg` and of the modules. The defaults are the numbers
above.

Leaf blocks:

| Module | Role |
|---|---|
| `rr_arbiter` | round-robin arbiter; the pointer moves only when a grant is actually used |
| `log_xbar` | combinational N x M crossbar with valid/ready and one `rr_arbiter` per output |
| `spm_bank` | 1 KiB bank, single cycle, registered response, read-first |
| `stream_fifo` | valid/ready FIFO without fall-through, depth 2 in the routers |
| `spill_register` | two-slot pipeline register, full throughput, one cycle |
| `tile_req_steer` | address decode and per-port core arbitration at the tile's core side |
| `router` | 5x5 XY router with input and output FIFOs, generic flit type |
| `router_remapper` | LFSR-driven permutation of q tile channels onto q routers |

## Address map

Words are interleaved over every bank of the cluster, so consecutive words land in consecutive
banks, then tiles, then groups:

| Bits | Field |
|---|---|
| [1:0] | byte in word |
| [5:2] | bank in tile (N = 16) |
| [9:6] | tile in group (Q = 16) |
| [13:10] | group (16) |
| [21:14] | row in bank (256) |

Higher address bits are ignored. The field offsets follow the parameters: with other sizes
each field takes log2 of its count.

A group's number g gives its mesh position: column x = g / 4 and row y = g % 4. So groups 0 to 3
fill the first column.

## How a request travels

Every request carries an *initiator id*: group, tile and core of the issuing core, and a 3-bit
transaction id. Its response carries the same id back. Loads and stores both get a response; a
store's response is its acknowledge.

1. **Steering at the tile** (`tile_req_steer`). The group and tile fields of the address choose
   one of these paths:
   - *Own tile*: the request goes to the local core-to-bank crossbar.
   - *Another tile of this group*: remote port 0.
   - *Another group*: one of the K router ports, 1..K. Stores always use the read-write port.
     Loads are spread over all K ports by core index (core % K). With K = 2 and one read-only
     port, two cores of a tile send their remote loads through the read-write router and two
     through the read-only router.

   When several cores want the same remote port, a round-robin arbiter picks one per cycle.
2. **Tile boundary.** Every outgoing request and response port has a spill register. These are
   the extra cycles that make an intra-group access cost 3 cycles instead of 1.
3. **Inside the group.**
   - *Port 0* goes to a QxQ request crossbar, selected by the tile field. It enters the target
     tile on that tile's incoming port 0.
   - *Ports 1..K* each get a header with the destination group's mesh coordinates.
4. **Remapper.** For each k, the tiles are taken four at a time, and a remapper permutes their
   four port-k channels over four routers. Each of these channels is its own mesh plane.
   - Plane numbering: remapper j, output i feeds plane k·Q + j·q + i.
   - The permutation is a rotation by (LFSR mod q). The 8-bit LFSR starts from a seed and steps
     every cycle.
   - This spreads bursty traffic from one tile over several planes.
   - With `RemapStride = 1`, remapper j takes tiles j, j+4, j+8 and j+12 instead of four
     neighbours.
   - A request may leave the source group on any plane of its port class. All planes lead to
     every group, so the choice does not affect correctness.
5. **Mesh.** Each plane has one router per group. The router routes X first, then Y, and ejects
   at the local port when both coordinates match.
   - Request planes of the read-only ports carry narrow flits: address and initiator only.
   - Request planes of the read-write ports carry full flits.
   - There is a separate response plane for every request plane. Requests and responses
     therefore never wait on each other, which rules out protocol deadlock.
6. **Arrival.** The local output of the plane-k routers feeds one of K router-to-tile crossbars,
   selected by the tile field of the address. The request enters the target tile on incoming
   port k + 1 and joins the core requests at that tile's bank crossbar, under the same round
   robin.
7. **Response.** The bank's response goes back out of the port the request came in on.
   - For port 0, it crosses the tile-to-tile response crossbar.
   - For a mesh port, it gets a header with the initiator's group. Then it goes through the
     response remapper, the response plane and the initiator group's router-to-tile response
     crossbar.

   At the initiator tile, a response crossbar hands it to the core named in its id.

A bank holds its response register until the response is taken. While the response waits, the
bank takes no new request. Back-pressure therefore reaches all the way to the cores. Nothing is
ever dropped.

## Latency

Round trip from a core issuing a load to the response being valid, with no contention:

| Target | Cycles | Where they come from |
|---|---|---|
| own tile | 1 | bank response register |
| other tile, same group | 3 | spill register on the request + bank + spill register on the response |
| other group | 3 + 4·R | R = routers on the path = Manhattan distance + 1; every router costs 2 cycles (input FIFO, output FIFO), once each way |

In the 4x4 mesh, a neighbouring group costs 11 cycles and the opposite corner costs 31. The
average over uniformly random remote groups is about 17.7 cycles.

**Departure from the paper.** The paper that proposes TeraNoC gives three figures for this mesh:

- 7 cycles to a neighbour;
- 31 cycles to the farthest group;
- 13.7 cycles on average.

Its closed-form worst case, 2·L_hop·(2·√16 − 1) with L_hop = 2 plus the crossbar cycles, counts
seven router stages for six links. That agrees with the 31 and with this RTL, where the source
and destination routers each add their two FIFO cycles. The 7 and 13.7 would need routers that
cost nothing at injection and ejection. This RTL follows the worst-case formula.

Queuing adds to these numbers under load. The testbenches measure the contention-free values
exactly and check them.

## Parts to be careful with when changing the design

- **Read-only planes.** `NumRo` of the K ports carry no store data. The steering logic never
  sends a store to them, and an assertion in `tile_req_steer` enforces this. If you change the
  port rule, keep stores on the read-write ports.
- **Remapper pairs.** Requests and responses each have their own remapper. Every remapper of a
  group has its own seed, derived from 0xA5 (requests) or 0x5A (responses) and its index. The response of a request need not come back on the plane the request used. It
  only needs some response plane of the same port class, which every router-to-tile response
  crossbar reaches. So the permutation can change every cycle.
- **Handshake rules.** Every stream is valid/ready. A valid request keeps its payload until it
  is accepted. Arbiters move their pointer only on an accepted transfer. The crossbar asserts
  that its select is in range, and the router asserts that no flit is sent back the way it
  came.
- **Unused winner indices.** The crossbars also report which input won each output. The tile
  and group do not need this, because every flit carries its own return information. Lint
  therefore reports these outputs as unused signals; the module headers say so.
- **Arbitration shape.** The crossbars are single-level: one multiplexer and one round-robin
  arbiter per output. A real implementation of a 16x16 logarithmic crossbar uses a tree of
  two-input nodes. Timing-wise the tree is the better circuit. The routing function and
  fairness are the same.

## Departures and choices in brief

| Point | In this RTL |
|---|---|
| Address map, id format, flit formats | own choice (word interleaving as the paper describes) |
| Which router port a load uses | core % K; stores on read-write ports |
| Store acknowledge responses | own choice |
| Remapper | 8-bit LFSR, rotation permutation, q = 4, a different seed per remapper |
| Mesh position of a group | column-major numbering, 0 at a corner |
| Neighbour latency | 11 cycles, paper text says 7 (see Latency) |
| Crossbar structure | flat per-output arbitration instead of a logarithmic tree |
| Cores, I-caches, DMA/AXI network, HBM | not included; the core ports are brought out |

## Verification

Every module has a self-checking testbench in `tb/` named `tb_<module>`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

- **Unit testbenches.** They drive random traffic with random back-pressure. They compare
  against reference models written in the testbench: FIFO queues, a memory array, an
  expected-winner model for round robin, and the XY route for the router.
- **Latency checks.** Where a latency is fixed, the testbench counts cycles. Examples: the FIFO
  and spill-register delay, 2 cycles per router, and 1/3/3+4R in the tile, group and cluster
  tests.
- **`core_traffic`.** This traffic model stands in for the cores. It does three things:
  - measures latencies from core 0 to its own tile, another tile and every group;
  - has every core store words to known addresses spread over the whole cluster;
  - has every core load random words, checking each returned value.

  It keeps up to 8 loads in flight per core and checks every response against its expected
  value.
- **`tb_teranoc_cluster`.** Runs the whole cluster reduced to a 2x2 mesh of groups, 4 tiles of
  2 cores and 4 banks, K = 2. It counts each mechanism and fails if one never happened:
  - local access;
  - intra-group access;
  - inter-group access;
  - core stall;
  - bank conflict;
  - load on the read-only plane;
  - store on the read-write plane;
  - a change of remapper permutation;
  - mesh back-pressure.
- **`tb_teranoc_cluster_full`.** Runs the unmodified default top, with 1024 cores, through the
  same phases with fewer accesses per core (2 stores and 8 loads each). It measures all 16
  latencies from the corner group 0: 1 and 3 cycles inside the group, and 11 to 31 cycles across
  the mesh. It checks 10,275 values, all correct. The simulation itself takes a few seconds,
  but building the simulator takes about 20 minutes on two cores, because the default top
  produces nearly 500 C++ files. The largest size simulated is therefore this full default size.
  `tb_teranoc_cluster`, at the reduced size above, is the end-to-end test for quick runs.

Every unit testbench has also been run against a deliberately broken copy of its module, and
each one reports failures. The broken copies are: an arbiter pointer that does not move, a FIFO
that overwrites when full, a crossbar that ignores its grant, a bank that ignores byte enables,
misrouted flits and a frozen remapper.

Simulating with Verilator 5 (two-state, so the testbenches reset or initialise everything they
read):

```
verilator --binary --timing --assert rtl/teranoc_pkg.sv \
          $(ls rtl/*.sv | grep -v teranoc_pkg) tb/*.sv \
          --top-module tb_teranoc_cluster -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The package must come first. Replace the top module by any `tb_*` name. The reduced end-to-end
test compiles and runs in about a minute. The full-size cluster produces close to 500 C++ files,
which take around 20 minutes to compile on two cores. Pass `-j 0` to verilator to build on all
cores.

## Using the cluster

`teranoc_cluster` has one port of each kind per core, indexed group·64 + tile·4 + core:

- `core_req_valid_i` / `core_req_ready_o` / `core_req_i` (a `tcdm_req_t`: address, store flag,
  byte enables, data, initiator id);
- `core_rsp_valid_o` / `core_rsp_ready_i` / `core_rsp_o` (a `tcdm_rsp_t`: data, store flag,
  initiator id).

A core must put its own group, tile and core numbers in the id. It may choose the transaction
id freely, and use it to match responses. Responses from different targets can return out of
order.
