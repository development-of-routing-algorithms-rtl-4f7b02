# Routing in ring-circulant networks-on-chip: RTL

A mesh or torus network-on-chip has a large diameter for its node count. It also
works well only when the node count is a perfect square. A two-dimensional
circulant `C(N; s1, s2)` keeps the same router degree (four network links). It puts the
N routers on a ring. Each router links to the routers `±s1` and `±s2` positions away.
A circulant can have any N, and it has a smaller diameter and average distance.
A *ring* circulant fixes `s1 = 1`. It is slightly worse than the optimal circulant,
but its unit-length generatrix (step size) makes routing simple.

This RTL implements the three routing algorithms proposed for ring circulants in
A. Yu. Romanov, "Development of routing algorithms in networks-on-chip based on
ring circulant topologies" (Heliyon, 2019). Each is a separate, exchangeable
routing unit:

* **table routing**: each router holds one row of a precomputed routing table;
* **clockwise routing**: the packet carries the remaining clockwise distance. Each
  router picks a step from that distance, N and s2. It is cheap, but it
  never turns back, so its routes are not always the shortest;
* **adaptive routing**: the packet carries the destination. Each router evaluates
  a closed-form comparison of candidate routes, including routes that wrap
  around the ring up to twice, and takes the first step of the cheapest.

The RTL also has a small packet router that hosts a routing unit, and a top level that wires
N routers into `C(N; 1, s2)`. The router is this design's own. The paper used routers from an
existing library and does not describe them.

## Topology and port numbering

Node `v` (numbered `0 … N-1`) has four network ports, numbered clockwise around the
router:

| port | neighbour | generatrix |
|------|-----------|------------|
| 0 | v+1  | small, clockwise |
| 1 | v+s2 | large, clockwise |
| 2 | v−s2 | large, counter-clockwise |
| 3 | v−1  | small, counter-clockwise |

A flit sent on port `p` arrives at the neighbour on port `3−p`. Port 4 is the
local port to the IP block. All indices are mod N. `rc_pkg` holds these constants
and the `routing_alg_e` enum (`ALG_TABLE`, `ALG_CLOCKWISE`, `ALG_ADAPTIVE`).

The paper's router figure and its text ("sent via port 0, received via port 3")
number the ports as above. Its printed routing table for `C(8;1,3)` swaps the
labels of ports 2 and 3. The RTL follows the figure and the text.

## Flit format

A packet is one flit: `{address field [NODE_W-1:0], data [DATA_W-1:0]}`, with
`NODE_W = ceil(log2 N)` (7 bits for N = 100) and `DATA_W = 32`. The address field
means different things under the different algorithms:

| algorithm | address field | rewritten per hop |
|-----------|---------------|-------------------|
| table     | destination node | no |
| clockwise | `(dst − current) mod N` | yes |
| adaptive  | destination node | no |

The sending IP forms the field. For clockwise routing it writes `(dst − src) mod N`.

## The routing units

All three have the same interface. The input is `addr_in`, the address field of
the head flit. The outputs are `is_local` (the packet has arrived), `out_port`
(0–3) and `addr_out`. A configuration write port `cfg_we/cfg_addr/cfg_data`
rewrites whatever the unit stores. All outputs are combinational in `addr_in` and
the stored state. Stored state is held in registers, resets to values derived
from the parameters, and changes on the clock edge after a configuration write.

### table_routing

The unit stores one row of `N` entries of 2 bits. The entry for destination `d`
is the port on which packets for `d` leave. The whole network therefore stores
`N·N·2` bits. At reset each entry gets the lowest-numbered port that starts a
shortest path. The value is computed at elaboration by `rc_pkg::table_hop`:
`dist(0, d)` is the minimum over `k` of `|k| + ringdist(d − k·s2)`. This rule
reproduces every entry of the published `C(8;1,3)` table. Writing
`cfg_addr = d, cfg_data = port` replaces an entry, so any other route set can be
loaded. The unit recognises arrival by comparing the destination with the
router's number. That number is the parameter `ID`; the table itself has no
entry for its own node.

### clockwise_routing

The unit stores only N and s2. For a field value `S`:

* if `S = 0`, the packet has arrived;
* if `2S ≤ N`, go clockwise: over s2 if `S ≥ s2`, otherwise over 1. The new
  field is `S − step`;
* otherwise, go counter-clockwise: over s2 if `N − S ≥ s2`, otherwise over 1. The
  new field is `S + step`, where N becomes 0.

The direction chosen at the source never changes, and the long step is used
greedily. A route can therefore take many more hops than the shortest one when
s2 is large compared with N. For `C(100;1,44)` the sum of hop counts from one
node to all others is 1941, against 469 for shortest paths (efficiency
K = 4.14). For `C(64;1,7)`, K = 1.19; for `C(8;1,3)`, K = 1.

### adaptive_routing

This is the most intricate unit. It stores its own number, N and s2. Let
`a = min(own, dst)`, `b = max(own, dst)` and `S = b − a`. When `own > dst`, the
step found is negated at the end (mirroring). A distance `x` can be covered in
two ways:

* `q = x / s2` long steps, then `r = x mod s2` unit steps: `q + r` hops;
* `q + 1` long steps, then `s2 − r` unit steps back: `q + s2 + 1 − r` hops.

The unit evaluates both ways for `x = S, S+N, S+2N` going right, and for
`x = N−S, 2N−S, 3N−S` going left. The terms with `+N` and `+2N` are routes that
pass the origin of the ring once or twice. The paper calls this passing a
"cycle": in `C(100;1,44)`, for example, node 1 reaches node 38 by
1‑57‑13‑69‑25‑81‑37‑38, which is six −44 steps and one +1. The first step is
chosen per direction:

* the direct route with `r ≠ 0`, when the first way is strictly cheaper, starts
  with a unit step;
* every other candidate starts with a long step.

Right wins only if it is strictly cheaper; a tie goes left. The hardware
is six divide/modulo pairs by the stored s2 plus comparators, all
combinational. This is why the adaptive router is much larger than the other two.

The result is a shortest route whenever shortest routes need at most two
passes of the origin. The paper reports that this holds below N = 174. For larger
networks, more candidate terms (`S+3N`, …) would be needed; they are not built.
The testbenches confirm shortest routes for every pair of `C(100;1,44)`,
`C(9;1,2)`, `C(49;1,6)` and `C(144;1,17)`.

**Departure from the printed algorithm.** The paper's pseudocode sets the left
distance to `endNode − startNode + N`. That value is congruent to the right
distance, and it does not reproduce the paper's own example route. This unit uses
`startNode − endNode + N` (that is, `N − S`), which does reproduce it. The
pseudocode numbers nodes `1 … N`; here node N of the paper is node 0.

## The router (`rc_router`)

The router has five input FIFOs (depth `FIFO_DEPTH = 4`), one routing unit chosen
by `ALG`, and one output register per port. Each cycle, a round-robin pointer
picks a non-empty input. Its head flit goes through the routing unit. If the
target output register is empty, or is being emptied in this cycle, the flit
moves into it with the rewritten address field. One flit is switched per cycle.
The pointer moves past the chosen input every cycle, so a blocked head does not
stall the other inputs.

Links use valid/ready. An offered flit stays unchanged until it is taken; an
assertion checks this. A hop costs two clock edges (FIFO write, then switch). A
packet between two nodes `h` hops apart, in an idle network, is handed to the
destination IP `2·(h+1)` edges after the source accepted it.

The router has no virtual channels and no other deadlock avoidance. Under
sustained heavy load, a cycle of full buffers can block. Traffic towards a single
hot spot drains, because shortest-path and clockwise routes towards one node form
no cycle. This also holds when the hot spot stops accepting for a while.

## The network (`circulant_noc`)

`circulant_noc` instantiates N routers and wires port `p` of node `v` to port
`3−p` of `port_target(v, p)`. Its per-node interface:

* `inj_valid/inj_ready/inj_flit[v]`: from IP to network;
* `ej_valid/ej_ready/ej_flit[v]`: from network to IP;
* `cfg_we[v]`, with `cfg_addr`/`cfg_data` shared by all nodes: writes router `v`'s
  routing unit.

Configuration addresses: for table routing, `cfg_addr` is the destination and
`cfg_data[1:0]` the port. For clockwise routing, 0 = N and 1 = s2. For adaptive
routing, 0 = N, 1 = s2 and 2 = own number. `CNT_W = ceil(log2(N+1))` bits hold N, so that a
power-of-two N fits.

Parameters (defaults in brackets): `N` [100], `S2` [44], `ALG` [`ALG_ADAPTIVE`],
`DATA_W` [32], `FIFO_DEPTH` [4]. The default `C(100; 1, 44)` is the circulant of
the paper's route example. The paper proposes all three algorithms and names no
default; adaptive is the default here because the example is given for it.

## Storage compared with the paper's formulas

At N = 100:

| algorithm | formula | bits | this RTL |
|-----------|---------|------|----------|
| table     | `N²·ceil(log2 4)` | 20 000 | 20 000 (register array) |
| clockwise | `N·(ceil(log2 N)+ceil(log2 N/2))` | 1 300 | 1 400 |
| adaptive  | `N·(2·ceil(log2 N)+ceil(log2 N/2))` | 2 000 | 2 100 |

The difference is s2, which this RTL holds in the same 7 bits as N instead of 6.

## What follows the paper and what does not

Taken from the paper:

* the topology and port numbering;
* the three routing procedures, which are combinational, as the paper intends for
  the adaptive one;
* the address-field contents and sizes;
* what each router stores.

This design's own choices:

* the router: single-flit packets, FIFO depth, round-robin switching, valid/ready
  links, asynchronous active-low reset;
* the 32-bit data field;
* configuration write ports on the stored state;
* arrival detection in the table unit by a node-number parameter;
* keeping the clockwise field modulo N (the paper lets it reach N, which does not
  fit in `ceil(log2 N)` bits);
* the corrected left distance in the adaptive unit.

The paper's FPGA resource results (Cyclone V ALM and register counts, and the
estimate of how many routers fit) are synthesis measurements of the authors' own
router and are not reproduced.

## Files

`rtl/`:

* `rc_pkg.sv`: constants, the algorithm enum, topology and shortest-distance
  functions;
* `rc_fifo.sv`: the input buffer;
* `table_routing.sv`, `clockwise_routing.sv`, `adaptive_routing.sv`: the routing units;
* `rc_router.sv`: the router;
* `circulant_noc.sv`: the network top.

`tb/` (each testbench prints `TB_RESULT checks=… failures=…`):

* `tb_ref_pkg.sv`: reference models written independently of the RTL. They are a
  breadth-first search, the clockwise step and the adaptive step procedure.
* `table_routing_tb.sv`: compares the rows with the published `C(8;1,3)` table,
  checks shortest first hops at N = 100, and checks table writes.
* `clockwise_routing_tb.sv`: checks every field value against the reference step
  and full walks, and prints K.
* `adaptive_routing_tb.sv`: checks the 1→38 example hop by hop and all pairs of
  four circulants against the reference model and shortest distances.
* `rc_router_tb.sv`: random traffic with backpressure, output-port and data
  checks, the 2-edge latency, and clockwise field rewriting.
* `noc_harness.sv` and `circulant_noc_tb.sv`: small networks end to end, one per
  algorithm. They check random traffic, a hot spot that stalls injection, a table
  rewrite, exact hop counts, the lone-packet latency, and that every mechanism
  occurred.
* `circulant_noc_full_tb.sv`: the default `C(100;1,44)` adaptive network. It
  follows the example route link by link, then checks random traffic from all
  nodes over shortest routes (K = 1).

To simulate, for example the full-size network (the C++ build takes about three
minutes):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/rc_pkg.sv tb/tb_ref_pkg.sv tb/circulant_noc_full_tb.sv \
  --top-module circulant_noc_full_tb -o sim
./obj_dir/sim
```

To run another testbench, replace the last file and the top module name. To try
another network, change `N`, `S2` and `ALG` on `circulant_noc`. The table unit
fills its rows for any `(N, s2)` at elaboration. The adaptive unit needs `N < 174`
(or, more exactly, at most two passes of the origin) for shortest routes.
