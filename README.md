# A collective-capable mesh fabric for FlatAttention

Multi-head attention on a tile-based accelerator is limited by main-memory
(HBM) traffic when every tile works alone on its own block, as in
FlashAttention. FlatAttention instead lets a *group* of tiles, up to the whole
32 x 32 mesh, share one large attention block: only the tiles on the group's
west edge load Q rows from HBM and only those on its south edge load K^T and V
columns; everything else moves tile to tile. That trade only pays off if the
on-chip network can do the group's collective communication itself:

* **row and column multicast**: a west-edge tile sends a Q slice to every tile
  of its row, a south-edge tile sends K^T/V slices up its column, and the row
  statistics of the Softmax are broadcast back along the row;
* **row sum- and max-reduction**: the partial row maxima, the partial Softmax
  denominators and the partial output rows of all tiles of a row are combined
  into the west-edge tile.

This repository holds synthesizable SystemVerilog for that fabric: a 2D mesh
of five-port routers that duplicate multicast flits in flight and combine
reduction flits in the router, with FP16 arithmetic in the network. The
reference configuration is 32 x 32 tiles with 1024-bit links and HBM on the
west and south edges. The RTL defaults to a 16 x 16 mesh (`NX`, `NY`) because
elaborating 1024 routers with 64 FP16 adders each takes about 25 GB in
Verilator; set `NX = NY = 32` for the reference size. The tiles' compute and memory (matrix engine,
vector engine, scalar core, DMA engine, L1 scratchpad) and the HBM
controllers are existing designs this fabric connects to; they are not
included, and their links are the fabric's ports.

## Why the collectives matter

Sending an `alpha`-byte message to `N` tiles in a chain by repeated unicast
costs about `N * (alpha/beta + 2*L_d + (N+1)/2 * L_r)` cycles, where `beta` is
the link bandwidth, `L_d` the L1-to-router latency and `L_r` the per-hop
latency. With path-based multicast the source injects the message once and
every router on the path hands a copy to its tile while forwarding the flit:
`alpha/beta + 2*L_d + N*L_r`. For a 16 KB message to 7 tiles with
`beta` = 128 B/cycle, `L_d` = 10 and `L_r` = 4 that is about six times faster.
In this fabric `beta` is one 1024-bit flit (128 B) per cycle and `L_r` is 2
cycles; the end-to-end test measures exactly `M - 1 + 2*N` cycles for an
`M`-flit multicast across `N` routers.

## Coordinates and flits

Tiles sit at `x = 1..NX` (west to east) and `y = 1..NY` (south to north).
`x = 0` addresses the west HBM edge and `y = 0` the south HBM edge, so HBM
traffic uses the same routing as tile traffic: a flit for `(0, y)` leaves
through the west port of router `(1, y)`.

A flit (`coll_pkg::flit_t`, 1077 bits) is a 1024-bit payload plus a header
carried on parallel wires:

| field          | bits | meaning                                             |
|----------------|------|-----------------------------------------------------|
| `op`           | 3    | `OpUnicast`, `OpMcastRow/Col`, `OpRedSumRow/Col`, `OpRedMaxRow/Col` |
| `dst_x, dst_y` | 8+8  | unicast destination                                 |
| `src_x, src_y` | 8+8  | sender, for replies (not interpreted)               |
| `lo, hi`       | 8+8  | range of the collective along the row (x) or column (y) |
| `last`         | 1    | last flit of a message (not interpreted)            |

Every flit is routed on its own; there are no multi-flit worms and no
per-packet router state. A long message is a stream of flits with identical
headers; because routes are deterministic, flits between the same two points
arrive in order. The payload is read by reductions as 64 FP16 lanes, lane `k`
in bits `16k+15 .. 16k`.

## The router (`coll_router`)

Five ports, N, E, S, W and L (local, the tile's DMA). Each input has a 2-entry
FIFO; each output a one-flit register. A flit accepted into an input FIFO in
cycle `c` is on the next router's input in cycle `c + 2`, and every link can
carry a flit every cycle. Links are valid/ready; valid never waits for ready
and neither side has a combinational path through the router.

**Unicast** goes X first, then Y. The one exception: a flit for the west HBM
edge (`dst_x = 0`) goes Y first, then west, so it exits on its destination
row. The exception only adds N/S-to-W turns; no turn into E is ever made after
a vertical move, so no cycle of turns, and no routing deadlock, can form.

**Multicast** (`OpMcastRow` with range `[lo, hi]` of x, `OpMcastCol` of y).
At each router the flit is handed to the tile if the router's coordinate lies
in the range and the flit did not come from that tile, and forwarded east
(north) if `hi` is further on, west (south) if `lo` is. The source may sit
anywhere in the range; FlatAttention uses the group's west or south edge.
A multicast flit leaves its input only in a cycle in which *all* outputs it
needs are free, so copies never go out of step.

**Reduction** (`OpRedSum/MaxRow`, `OpRedSum/MaxCol`, range `[lo, hi]`). Each
tile in the range injects one flit per reduction step through its local port.
The partial result travels west (rows) or south (columns), from `hi` to the
root `lo`:

* at `hi` the tile's flit is sent on unchanged;
* at every other router the local flit waits until the partial result from
  upstream (the E input for rows, the N input for columns) is at the head of
  that input; both are popped in the same cycle, combined lane by lane
  (local operand first), and sent on; at `lo` the result goes to the tile.

A partial result that reaches a router before the local tile has injected
its part waits at the head of the E/N input and blocks that input until then.
Software must therefore make every tile in the range take part in every
reduction it starts; an assertion flags a partial result that meets a local
flit of a different reduction. For floating-point sums the combining order is
fixed: `x_lo + (x_lo+1 + (... + x_hi))`.

**Allocation.** The five inputs are visited in a rotating order; an input is
granted if every output it needs is free (empty, or emptying this cycle) and
not given to an earlier input of the same cycle. The first input in the order
that can go always goes, so the router cannot stall while an output is free;
the order restarts just after that input, which keeps it fair.

## The reduction arithmetic (`coll_reduce_alu`, `fp16_add`, `fp16_max`)

64 lanes of IEEE binary16. `fp16_add` aligns the smaller operand with guard,
round and sticky bits, adds or subtracts the magnitudes, normalises (never
below the smallest exponent, so subnormals are exact), rounds to nearest even
and handles overflow, infinities and NaN. `fp16_max` orders values through an
integer key; `+0` beats `-0`, and a number beats a NaN. All combinational; the
router's output register holds the result.

## The mesh (`flatatt_fabric`, top)

`NX x NY` routers (16 x 16 by default, 32 x 32 in the reference system). Ports, each an array of links with
`valid`, `ready` and a `flit_t`:

* `tile_in_*` / `tile_out_*` `[NY][NX]`: the local port of every router,
  index `[r][c]` for the tile at `(c+1, r+1)`;
* `west_in_*` / `west_out_*` `[NY]`: one HBM link per row on the west edge;
* `south_in_*` / `south_out_*` `[NX]`: one HBM link per column on the south
  edge.

The north and east edges have no links; an assertion fires if anything is
routed there. The reference system has 16 HBM channels on each of the two
edges, so each channel would serve two edge links; that pairing belongs to
the HBM controller and is not part of this RTL.

## What is from the reference architecture and what is this design's

From the reference architecture: the 32 x 32 mesh with one router per tile,
1024-bit links, HBM on the west and south edges, path-based duplicate-and-
forward multicast, hardware row/column multicast, sum- and max-reduction,
FP16 as the datatype, and the way FlatAttention uses them (edge tiles load
and multicast, row reductions end at the west-edge tile).

This design's own choices: the flit header, the coordinate scheme, single-flit
packets, XY routing with the west-edge exception, 2-entry input FIFOs,
2-cycle hops (the reference's example figures are 4 cycles per hop and 10 for
L1 to router; they are used only to illustrate the cost model), the in-router
join as the way a reduction is done, the reduction direction toward the low
end of the range, the rounding and special-value rules of the FP16 units, and
the allocation scheme.

Not included: the tile (matrix engine with a 32 x 16 array, vector engine with
16 FPUs and an exponential unit, scalar core, DMA, 384 KB L1 at 512 GB/s,
instruction cache) and the HBM controllers and devices. The FlatAttention
dataflow itself is software running on the tiles; the end-to-end test plays
its data movement by driving the tile ports.

## Verification

Testbenches in `tb/` are self-checking and print
`TB_RESULT checks=N failures=M` at the end; each has a watchdog.

* `tb_coll_reduce_alu`: 400 random 1024-bit operand pairs (with subnormals,
  near-cancellations, near-overflow values) and directed special cases,
  against a double-precision reference rounded to nearest even
  (`tb/fp16_ref.svh`).
* `tb_coll_router`: one router at (3, 3): unicast in all directions and to
  the west HBM edge, multicast from the tile, passing through, ending at the
  range border, a multicast held back by a busy branch, row sum/max joins,
  the first and last router of a reduction, a column sum, the 2-cycle hop,
  one flit per cycle streaming, and random back-pressure.
* `tb_flatatt_fabric`: a 4 x 4 mesh used as one FlatAttention group, walked
  through one outer iteration of the data movement (`tb/fabric_test.svh`):
  Q from the west HBM edge and row multicast, K^T/V from the south edge and
  column multicast, row max and row sum reductions (tiles injecting in
  scrambled order) each followed by a multicast of the result, column sum
  and max, O rows stored to both HBM edges under random back-pressure, and a
  timed 16-flit multicast. It counts how often each mechanism happened and
  fails if one never did.

The largest mesh simulated is 4 x 4; linting at 16 x 16 takes about 80 s and
6.3 GB with Verilator, and memory grows with the number of routers, so the
full 32 x 32 mesh needs roughly 25 GB to elaborate. The fabric test body is
written for any size: `tb_flatatt_fabric` sets `NX`/`NY` with two localparams.

Running a test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -I. -y rtl -y tb +libext+.sv \
  rtl/coll_pkg.sv tb/tb_flatatt_fabric.sv --top-module tb_flatatt_fabric -o sim
./obj_dir/sim
```

(The testbenches include `tb/fp16_ref.svh` relative to the repository root.)

## Files

| file                      | contents                                        |
|---------------------------|-------------------------------------------------|
| `rtl/coll_pkg.sv`         | link width, coordinates, opcodes, flit type     |
| `rtl/coll_fifo.sv`        | router input buffer                             |
| `rtl/fp16_add.sv`         | FP16 adder, round to nearest even               |
| `rtl/fp16_max.sv`         | FP16 maximum                                    |
| `rtl/coll_reduce_alu.sv`  | 64-lane sum/max of two flits                    |
| `rtl/coll_router.sv`      | five-port router with multicast and reduction   |
| `rtl/flatatt_fabric.sv`   | the mesh (top)                                  |
| `tb/fp16_ref.svh`         | reference FP16 arithmetic for the testbenches   |
| `tb/fabric_test.svh`      | end-to-end test body                            |
| `tb/tb_*.sv`              | testbenches                                     |
