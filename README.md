# MultiGCN: a multi-node accelerator for graph convolutional network inference

A GCN layer computes, for every vertex v, `h_v' = (AGG over u in N(v) of h_u) x W`:
a reduction (sum, min or max) over the feature vectors of v's neighbours, followed by a
dense product with a weight matrix. On a large graph spread over many nodes the
aggregation step is dominated by communication, because every vertex's feature vector
is needed on every node that holds one of its neighbours.

This design attacks that in two ways:

* **One-put-per-multicast.** A vertex's feature vector is sent once, as a single
  multicast packet that carries the list of destination nodes and, for each of them, the
  list of its local neighbours. Routers split the packet on the way, so every link carries
  the vector at most once per tree branch, instead of one unicast per neighbour.
* **Round partition.** Vertices are processed in rounds. In one round each node keeps only
  `2^x` intermediate results, chosen by bits of the vertex ID, so the replicas it
  receives can be consumed and freed as they arrive instead of being stored for the
  whole graph.

The RTL is a 4x4 2D torus of 16 processing nodes (`rtl/multigcn_top.sv`). Each node
has a router, a loader, a send unit, a receive unit, on-chip buffers, a scheduler and a
compute unit of eight reusable 1x128 systolic arrays. Data are 32-bit Q16.16 fixed point.

## Coordinates, ports and the packet

Node `k` sits at `(x, y) = (k mod 4, k div 4)`. Router ports are LOCAL, EAST (+x),
WEST (-x), NORTH (-y) and SOUTH (+y). Each of them wraps around the torus.

A packet is a header flit and then `nflits` data flits of 16 words (512 bits). The
header (`hdr_t` in `rtl/multigcn_pkg.sv`) holds:

| field | meaning |
|---|---|
| `dst_x, dst_y` | next destination of this copy of the packet |
| `src_vid` | vertex whose feature vector follows |
| `nid_cnt, nid[16]` | destination node list |
| `offset[17]` | CSR offsets: the neighbours for `nid[k]` are `nbr[offset[k] .. offset[k+1]-1]` |
| `nbr[8]` | local neighbour vertex IDs, all destinations together |

One header holds at most 8 neighbours (`MAX_NBR`). A vertex with more out-edges in one
round is described by several send records, so it goes out in several packets.

## Multicast split (`multicast_split.sv`, Algorithm 2)

When a packet reaches its next destination, the router sorts all entries of the nID list
by where they lie relative to that node. Relative coordinates use the torus distance in
the range `[-(side/2-1), side/2]`, and y grows towards the north (smaller fixed y).

| part | region |
|---|---|
| P0 | the node itself |
| P1, P3, P5, P7 | the axes: +x, +y, -x, -y |
| P2, P4, P6, P8 | the quadrants between them |

Empty parts are dropped. A quadrant part is merged with the axis part before it when
both are present. Each remaining part becomes a packet copy. Its header keeps only that
part's nIDs and neighbour lists, with the offsets rebuilt (`hdr_select`). Its next
destination is the nearest member of the part.

P0 goes to the receive unit. All other copies are routed on by DyXY. Each copy moves
only on shortest paths. The whole tree therefore reaches each destination along a
shortest path.

## DyXY routing and congestion (`dyxy_route.sv`, `router.sv`)

If the destination differs from the current node in both x and y, either direction is
productive. The router takes the neighbour with the lower *stress*: the fill level of that
neighbour's input buffer as an 8-bit value. On a tie it takes X. If only one axis differs,
the packet goes straight along it. Each router samples its neighbours' stress every 64
cycles (`STRESS_PERIOD`).

The router is store-and-forward. A whole packet must be in an input buffer before it
is served. One packet is served at a time, with round-robin among the five inputs. A
packet that needs a split is copied to each part's output in turn, rewriting only the
header. Output links are valid/ready flit channels. There are no virtual channels.

## Inside a processing node (`processing_node.sv`)

The loader fetches data from the node's DRAM over a line-based read channel (512-bit
lines, in-order responses, up to 32 reads outstanding). It fetches:

1. once: the weight matrix, which goes to the weight buffer;
2. per round: a round descriptor, the aggregation-slot records (vertex ID and the
   number of contributions it expects), then for each vertex to send, its send record
   (a prepared header plus feature address) and its feature lines.

This DRAM layout is this design's own (see `round_desc_t`, `send_rec_t` and `agg_rec_t`).
A host or preprocessing step must write it. `tb/top_bench.sv` shows how to build it from
a graph.

| unit | job |
|---|---|
| send unit | Turns a send record into a header, with the first destination set to the own node so the split starts at the source. It then streams the feature lines as data flits. |
| receive unit | Takes P0 packets. It writes the replica into the circular replica area of the aggregation buffer (the top quarter of the rows) and the neighbour list into the edge buffer. |
| scheduler | For the edge entry at the head of the edge buffer, issues, per neighbour u and per row, one aggregate operation: replica row (op) partial result of u. Slot = vID bits `[n, n+x)`, where `n` bits name the node. The first contribution uses the identity of the reduction. When a slot's count reaches its expected value, the slot is queued for combination. An operation whose partial-result row is still in the 3-cycle pipeline waits (read-after-write hazard). |
| compute unit | Holds eight 1x128 arrays. A free array takes aggregate operations (lowest number first). A combination request takes a free idle array (highest number first), but the last free array is kept for aggregation while operations wait. |
| combination buffer | Writes the combination results to DRAM at `out_base + (vid >> n) * 8`. |
| round sync | Each node raises its end signal when its round is complete. The next round starts when all 16 are raised. |

Combination in one array is output-stationary. PE j accumulates output element j.
Over `f_in + 128 - 1` steps the aggregated vector enters one word per step and passes
from PE to PE. The weights are read with the matching skew from a 128-bank weight
buffer. The result is ready `f_in + 128 + 2` cycles after the start.

A round on a node is complete when all its sends have left, all its slots are combined,
and all results have been written to DRAM.

## Buffer sizes

The defaults equal the sizes the paper gives:

| buffer | default | parameter |
|---|---|---|
| aggregation | 2048 rows x 512 B = 1 MB; 1536 result rows (alpha = 0.75) | `AGG_ROWS` |
| weight | 4096 x 128 words = 2 MB | `WROWS` |
| combination | 512 rows = 256 KB | `CB_DEPTH` |
| edge | 2048 x 64 B = 128 KB | `EB_DEPTH` |
| send unit | 8192 x 64 B = 512 KB | `SU_DEPTH` |
| loader | 14336 x 64 B = 896 KB | `LD_DEPTH` |
| router | 5 x 4915 flits = 1.5 MB | `RT_DEPTH` |

Configuration is given at run time (`cfg_t`):

* aggregate function;
* `f_in` (up to 1920 words, since `nrows` is 4 bits);
* `n` and `x`;
* number of rounds;
* DRAM base addresses.

Choose `x` as the largest value with `2^x * nrows <= 1536` and
`2^x <= 0.75 * 1 MB / (4 * f_in)`.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. Verilator finds the other modules through `-Irtl -Itb`. Its warnings from `-Wall`-style checks on testbench code are not errors, hence `-Wno-fatal`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/multigcn_pkg.sv tb/tb_multigcn_top.sv --top-module tb_multigcn_top -o sim
./obj_dir/sim
```

`tb/top_bench.sv` is the system-level bench. It contains:

* a behavioural DRAM per node (node 0 made slow on purpose to cause back-pressure);
* a random graph generator;
* the round partition and DRAM image builder;
* a software reference for the whole layer;
* counters that require splits, adaptive turns, network stalls and hazards to occur.

There are two system-level testbenches:

* `tb_multigcn_top` shrinks the buffers and uses two arrays per node so that stalls are
  frequent. It runs 64 vertices, F_IN=160, in two rounds.
* `tb_multigcn_top_full` runs the top at its default (paper) sizes with F_IN=128. It takes
  about 25 s of simulation and 130 MB.

## Where this design departs from the paper

* **No inter-round overlap.** A node starts loading round r+1 only after every node has
  ended round r. Overlap inside a round (load, send, receive, aggregate and combine all
  at once) is built.
* **Router.** Store-and-forward, one packet at a time, no virtual channels. The router
  buffer is split equally over five inputs. Deadlock freedom relies on shortest paths
  and large buffers, and is not proven for small buffers.
* **Packet limits.** At most 8 neighbours per header, and a header fits in one flit. The
  tie rule and the half-ring direction are this design's own.
* **Links and memory.** The inter-node links are direct flit channels. Link latency and
  bandwidth (NVLink, 500 cycles) are not modelled. DRAM (HBM) is outside the RTL, behind
  simple read/write ports, and the testbench models it.
* **DRAM layout and preprocessing.** The record formats and the host-side graph
  partitioning are this design's own. The partitioning is done in the testbench.
* **Number format.** The paper says only 32-bit fixed point; the Q16.16 split is assumed.
  Products are truncated and sums wrap.
* **Array scheduling.** The rule for sharing arrays between aggregation and combination
  is this design's own.
