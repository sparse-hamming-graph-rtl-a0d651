# Sparse Hamming graph network-on-chip in SystemVerilog

A chip built as a grid of identical tiles needs a network that connects the tiles. A 2D mesh is
cheap: each router has at most four neighbours, and every link joins two adjacent tiles. But
the number of router-to-router hops grows with the grid, and so do latency and congestion. A
flattened butterfly links every pair of tiles in a row and every pair in a column. That gives at
most two hops, at a large cost in router ports and wiring. A **sparse Hamming graph** covers the
range between the two. Start from the mesh. Then, for every length `x` in a set `S_R`, link
tile `i` to tile `i+x` in every row. Likewise, for every `x` in a set `S_C`, link tile `i` to
tile `i+x` in every column. With both sets empty the network is a mesh. With every length
present it is a flattened butterfly. Each added link stays within one row or one column, and
every row or column gets the same links. So the wiring stays aligned and evenly spread, and
each set trades cost against hop count step by step.

This repository is a synthesizable, cycle-level RTL model of such a network: routers, links and
network interfaces, wired by elaboration-time code from `R`, `C`, `S_R` and `S_C`. Its defaults
are the main configuration of the evaluation that introduced the topology. That configuration
has 64 tiles (here 8 x 8) with `S_R = {4}` and `S_C = {2,5}`. The links are 512 bits wide, and
the routers are input-queued with 8 virtual channels and 32-flit buffers.

## The topology as built

Tiles are numbered `(row, col)` from 0. In the main configuration each row has its 7 mesh
links plus the links 0-4, 1-5, 2-6 and 3-7. Each column has its mesh links plus 0-2, 1-3,
..., 5-7 (length 2) and 0-5, 1-6, 2-7 (length 5). Every row and every column has the same
links, so the graph is the Cartesian product of a *row graph* (8 nodes, lengths {1,4}) and a
*column graph* (8 nodes, lengths {1,2,5}). The row graph has diameter 3 and the column graph
diameter 2, so the network diameter is 5 hops. A mesh of the same size has a diameter of 14.

Router ports are numbered the same way in every tile:

| port | meaning |
|---|---|
| 0 | local port (network interface of the tile) |
| `1 + 2k` / `2 + 2k` | row link of the k-th length (k = 0 is the mesh link), towards higher / lower column |
| `1 + 2*NL_R + 2k` / `... + 1` | column link of the k-th length, towards higher / lower row |

`NL_R = 1 + |S_R|` and `NL_C = 1 + |S_C|`. So a router has `NP = 1 + 2*NL_R + 2*NL_C` ports,
11 in the main configuration. At the grid edge some ports have no link. They are tied off in
`shg_noc`, and synthesis removes their logic. The radix that counts is the number of connected
ports: 5 to 9 here.

`S_R` and `S_C` are given as 64-bit masks (`SR_MASK`, `SC_MASK`): bit `x` set means `x` is in
the set. Lengths must satisfy `2 <= x < C` for `S_R` and `2 <= x < R` for `S_C`. For example,
`S_C = {2,5}` is `64'h24`.

## Routing and why it cannot deadlock

The routing goal is fewest router-to-router hops. Because the graph is a product of the row
graph and the column graph, a shortest path in the row graph followed by a shortest path in the
column graph is a shortest path overall. The route unit (`shg_route_unit`) moves a flit along
its row until the column matches, then along the column. Each router holds two small next-hop
tables, one for rows and one for columns. They are computed at elaboration time by constant
functions in `shg_pkg`: a Bellman-Ford pass over the row or column graph, then a choice of
next hop. Among equally short next hops, the table takes the one that lands physically closest
to the destination, so flits avoid overshooting on a long skip link. If that still ties, it
takes the shorter link, then the upward direction. Hop-minimal routing does not always take the
shortest wire: with `S_R = {4}`, the way from column 0 to column 3 is 0 -> 4 -> 3 (two hops, 5
tiles of wire), not three mesh hops.

Paths with skip links are not monotonic, so plain dimension-order deadlock arguments do not
apply. The routers use **hop-indexed virtual channels** instead. A flit injected by a tile
travels on VC 0. After `h` hops it sits in VC `h` of the next router. It always leaves on the
VC one higher than the one it arrived on (ejection uses VC 0 of the interface). A flit waits
only for a buffer of a strictly higher VC, so no cycle of waits can form. The network is
deadlock-free as long as its diameter is below the number of VCs. `shg_router` checks this at
elaboration: 5 < 8 for the main configuration. A mesh of 8 x 8 (diameter 14) would need more
VCs than `VC_W = 3` can carry, and so would one of the larger evaluated sets (see the scenario
table below). This scheme belongs to
this design; the evaluation only states the VC count.

## Blocks

| file | block |
|---|---|
| `shg_pkg.sv` | types (`flit_t`, `flit_ch_t`, `credit_ch_t`), defaults, topology and routing functions |
| `shg_route_unit.sv` | next-hop lookup for one flit |
| `shg_vc_buffer.sv` | input queue: one FIFO per VC, with side data per entry |
| `shg_rr_arbiter.sv` | round-robin arbiter |
| `shg_router.sv` | input-queued VC router with credit flow control |
| `shg_link.sv` | pipelined link, flits forward and credits backward |
| `shg_ni.sv` | network interface between the endpoints and the local port |
| `shg_noc.sv` | top level: `R x C` routers, interfaces and links |

**Flits.** Every packet is a single flit: an 8-bit destination row and column, an 8-bit source
row and column, and a 512-bit payload (`DATA_W`, the per-link bandwidth of the evaluated
system). On a link, a flit travels with its valid bit and the 3-bit VC it will occupy
downstream (`flit_ch_t`). Credits travel the other way as a valid bit and a VC (`credit_ch_t`).

**Router** (`shg_router`). Each input port has a route unit and a `shg_vc_buffer` with `NUM_VC`
FIFOs of `DEPTH` flits each. The output port is computed as a flit arrives and stored next to
it, so one route unit serves all VCs of a port. In every cycle:

1. Each VC head is eligible if the downstream buffer of its output VC has a credit left. The
   router keeps one credit counter per output port and VC; each starts at `DEPTH`.
2. A round-robin arbiter per input picks one eligible VC.
3. A round-robin arbiter per output picks one of the inputs asking for it. This is separable
   switch allocation. A VC that loses waits for the next cycle.
4. Each winner crosses the crossbar to its output (combinationally), its credit counter drops,
   and a credit for the freed slot goes back upstream.

A flit on an input in cycle `t` can leave in cycle `t+1`, so a router takes one cycle. The
router pulses `evt_credit_stall` when some head waits for credits, and `evt_sa_conflict` when
some request loses output arbitration.

**Link** (`shg_link`). A link longer than one clock period can cross gets as many registers as
it needs. `shg_noc` gives a link that spans `d` tiles `d * LINK_CYC_PER_TILE` stages (default
1, minimum 1). Credits return through the same number of stages. The real number of stages
depends on tile size, wire delay and clock frequency (`L = t_wire(length) * F`). Change
`LINK_CYC_PER_TILE` to match a floorplan.

**Network interface** (`shg_ni`). The endpoint injects with a valid/ready handshake. `inj_ready`
is high while the interface holds a credit for the router's local input queue, and the accepted
flit is registered. Ejected flits land in a `DEPTH`-deep queue that the endpoint drains with
valid/ready. Each drained flit returns a credit to the router, so a slow endpoint pushes back
into the network.

**Latency through an empty network.** A flit accepted from tile A in cycle `t` shows up on
`ej_valid` at tile B in cycle

    t + 3 + sum over hops (link stages + 1)

The 3 cycles are the injection register, the first router, and the ejection queue. Example:
(0,0) to (7,7) in the main configuration. The row part is columns 0 -> 4 -> 3 -> 7, three hops
of spans 4, 1 and 4, costing 5 + 2 + 5 = 12 cycles. The column part is rows 0 -> 5 -> 7, spans
5 and 2, costing 6 + 3 = 9 cycles. The total is 3 + 12 + 9 = 24 cycles over 5 hops. The
end-to-end testbench derives every such number from its own model of the graph.

## Using it

Top module `shg_noc`. It has `R*C` copies of each endpoint port, indexed `t = row*C + col`:
`inj_valid/inj_ready/inj_flit` and `ej_valid/ej_ready/ej_flit`, plus the event pulses.
Parameters: `R`, `C`, `SR_MASK`, `SC_MASK`, `NUM_VC` (at most 8), `DEPTH` and
`LINK_CYC_PER_TILE`. The other evaluated configurations are reached through these parameters:

| scenario | tiles | `S_R` | `S_C` | parameters |
|---|---|---|---|---|
| a (default) | 64 | {4} | {2,5} | `R=8, C=8` |
| b | 64 | {2,4} | {2,4} | `SR_MASK=64'h14, SC_MASK=64'h14` |
| c | 128 | {3} | {2,5} | `R=16, C=8, SR_MASK=64'h8` (diameter 3+4 = 7) |
| d | 128 | {2,4} | {2,4} | not reachable with 8 VCs: diameter 8 in either grid shape |

The grid shape for 128 tiles is not given by the evaluation. For scenario c, 8 x 16 has
diameter 6+2 = 8 and is rejected at elaboration, so use 16 x 8. Scenario d needs 9 hop classes.
It needs `VC_W` raised to 4 in `shg_pkg` and `NUM_VC = 9`, beyond the 8 VCs of the evaluated
routers. Scenario b has diameter 3+3 = 6.

Simulation with Verilator. Each testbench prints `TB_RESULT checks=N failures=M`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_shg_noc \
        -y rtl -y tb +libext+.sv rtl/shg_pkg.sv tb/tb_shg_noc.sv
    ./obj_dir/Vtb_shg_noc

| testbench | what it checks |
|---|---|
| `tb_shg_route_unit` | every (tile, destination) pair of the 8 x 8 and the 3 x 6, `S_R = {3,5}`, `S_C = {2}` configurations against an independently built graph: the next hop exists, is one hop closer, stays in the row first; diameters 5 and 3 |
| `tb_shg_link` | exact delay of flits and credits for 1 and 4 stages |
| `tb_shg_vc_buffer` | per-VC FIFO order against a queue model; the overflow flag |
| `tb_shg_router` | one-cycle latency, port and VC choice, credit accounting, stalls and conflicts under random load, with depth 4 |
| `tb_shg_ni` | injection credits and back-pressure; ejection order and credit return |
| `tb_shg_noc` | a 6 x 5 network with the default link sets (`S_R = {4}`, `S_C = {2,5}`), 8 VCs and 4-flit buffers: exact latency of isolated flits on predicted paths, then uniform random traffic with a stalled hotspot; every flit delivered once and intact; skip-link hops, multi-hop paths, credit stalls, allocation conflicts, injection and ejection back-pressure must all occur |

The default network is large: 64 routers with 11 x 8 x 32 flit buffers of 544 bits each, about
1.2 Mbit of buffer per router. Its cycle model is too large to compile in reasonable time, so it has
not been simulated as a whole. The largest network simulated is the 6 x 5 grid above, with
4-flit buffers. It uses the same RTL with different parameters, and its build takes about three
minutes.

## Where this design departs from, or adds to, the evaluated system

- **Single-flit packets.** Packet length is not specified; one flit per packet keeps VC
  ownership out of the router.
- **"32-flit buffers" is read as per VC** (32 x 8 flits per input port), as in common
  cycle-level simulators. It could also mean 32 flits per port.
- **Router micro-architecture.** Credit flow control, separable round-robin allocation,
  routing on arrival and a one-cycle router are this design's choices. The evaluation gives
  only "input-queued, 8 VCs, 32-flit buffers" and a one-cycle minimum router latency.
- **Deadlock avoidance by hop-indexed VCs** (see above). This is not part of the evaluated
  setup.
- **Tie-breaking among shortest paths**: prefer the neighbour closest to the destination.
- **Link stages** follow the span in tiles and a cycles-per-tile parameter. The technology
  functions that would give real numbers are not available.
- **Transport protocol.** The evaluated system carries AXI over the network through existing
  AXI network components. That layer is not modelled here; flits carry a plain tile header.
- **Endpoints** (cores, memories) are outside this RTL; they connect to the `inj_*`/`ej_*`
  ports.
- The cost and performance prediction flow used to choose `S_R` and `S_C` is software. It has
  no counterpart here beyond the link-stage rule.
