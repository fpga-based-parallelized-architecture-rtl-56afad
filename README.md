# Graph-based image segmentation in hardware: a tiled union-find engine

This design segments a colour image into regions the way the
Felzenszwalb–Huttenlocher algorithm does. Every pixel is a vertex of a graph. The
edges link neighbouring pixels, and each edge is weighted by the colour difference
of its two pixels. The edges are visited from the lightest to the heaviest. Two
regions are merged along an edge when the edge is no heavier than what either
region already tolerates inside itself. After that, regions that are still too
small are absorbed into a neighbour, and every pixel is given a colour that
identifies its region.

The hardware follows the "hybrid" scheme of the FPGA architecture published by
its original authors. The image is cut into `n` tiles, and each tile is
segmented by its own engine, all engines at the same time. Shared logic then
stitches the tiles together along their seams, runs the small-region clean-up
over the whole image, and streams the result out. The default build handles a
128 × 72 image in 8 tiles (4 columns × 2 rows of 32 × 36 pixels).

Everything is synthesizable SystemVerilog-2017 in `rtl/`. Each block has a
self-checking testbench in `tb/`.

## The algorithm as the hardware sees it

**Graph.** Each pixel `Va` gets edges to four of its neighbours only: `Vb1`
(up-right), `Vb2` (right), `Vb3` (down-right) and `Vb4` (down). The other four of
the eight neighbours are covered by those pixels' own edges. For a W × H tile this
gives `(W-1)H + W(H-1) + 2(W-1)(H-1)` edges, which is 4406 for a 32 × 36 tile. The
weight is the Euclidean distance of the two RGB values, rounded down to an
integer. It lies in 0..441 and is held in 16 bits.

**Component record.** Each vertex has four fields, each in its own block RAM:

| field | bits | meaning |
|---|---|---|
| label `L` | 24 | parent pointer; a vertex whose label is its own number is a root |
| size `S` | 24 | number of pixels in the component (valid at the root) |
| rank `R` | 24 | union-by-rank height bound (valid at the root) |
| threshold `t` | 8 | `Int(C) + k/|C|`: the heaviest weight the component accepts |

Vertex numbers start at 1. The memory address of a vertex is therefore
`label − 1`, and a label of 0 never occurs (an assertion in the FIND unit checks
this).

At the start, every vertex is its own root, with size 1, rank 0 and `t = k`. Here
`k` is the single user constant of the algorithm (`cfg_k`).

**Threshold merge.** When edge `(a, b, w)` is visited and its two roots differ,
they are merged if `w ≤ t_a` and `w ≤ t_b`. Because the edges arrive in
non-decreasing order, `w` is then the largest internal edge of the merged
component. Its new threshold is therefore `t = w + k / (S_a + S_b)`, using
integer division and saturating at 255.

**Min-size merge.** A second pass goes over the same edges again. It merges two
different roots whenever either component has fewer than `cfg_min_size` pixels.
Size, rank and threshold are updated the same way.

**Union by rank.** The root with the larger rank stays the root. On equal ranks,
the root of `b` stays and its rank grows by one.

## Memory organisation

Every memory is a simple dual-port RAM (`sdp_bram`): one write port and one read
port, one cycle of read latency, read-first. Each tile owns:

- a pixel RAM of `TW·TH` × 24 bits;
- the four vertex-field RAMs (`vertex_store`), 80 bits per vertex in total;
- three edge RAMs `Va`, `Vb`, `W` (`edge_store`), which pack **four edges per
  address** (4 × 24, 4 × 24 and 4 × 16 bits). Edge `i` sits in word `i/4`,
  lane `i mod 4`. The edge walker reads one word and then uses its four lanes one
  after another.
- the counting-sort scratch memories inside `edge_sort`: a 512-entry histogram
  and a staging RAM for the unsorted edges.

Labels are global across the whole image: `label = tile·2^LW + local + 1`, where
`LW = ⌈log2(TW·TH)⌉`. The shared logic decodes the tile from the upper bits and
the address from the lower bits. This lets one FIND or JOIN follow a parent
chain that crosses from one tile's RAMs into another's. Inside a tile the label
arithmetic is the same, so tile and shared phases use one format.

At the default size, synthesis sees about 4.9 Mbit of memory, about 9.7 k
flip-flop bits and about 6.5 k generic cells.

## FIND: walking to the root (`find_unit`)

FIND holds the current label in a register. It reads that vertex's label field
(`address = label − 1`) and compares the result with the register:

- If they are equal, the vertex is a root, and FIND is done.
- If they differ, the register takes the parent label and the loop repeats.

When the root is found, FIND writes it back into the label of the starting
vertex. This is a one-step path compression: the next FIND from that vertex takes
a single step.

Each step takes two cycles: a read, then a compare. A FIND that starts at depth
`d` finishes `2(d+1)+2` cycles after `start`. This count is checked by its
testbench.

## JOIN: deciding and merging (`join_unit`)

JOIN receives two root labels, the edge weight and the mode. It:

1. stops at once if the two labels are equal;
2. reads both records (`RD_A`, `RD_B`);
3. evaluates the merge test for the current mode (`DECIDE`);
4. divides `k` by the new size in a sequential restoring divider
   (`seq_divider`, `WIDTH+1` = 25 cycles). The quotient is added to `w`.
5. writes the new root's rank, size and threshold (`WR_ROOT`), and points the
   other root's label at it (`WR_CHILD`).

An assertion checks that JOIN never points a root at itself when it writes the
child's label.

## The edge walker (`seg_fsm`)

`seg_fsm` is the controller that turns a sorted edge list into merges. It runs in
both threshold mode and min-size mode. Its loop is:

1. read edge word `addr`;
2. pick lane `lane`;
3. FIND `Va` and FIND `Vb` together;
4. JOIN the two roots in the requested mode, once both are known;
5. advance the lane, and on lane 3 advance the address;
6. stop after edge `num_edges − 1`.

Testing the edge count, rather than a maximum address, means a partly filled last
word is handled correctly. The FSM counts the merges it makes.

**Two FINDs on one port.** The vertex RAMs have a single read port, yet the two
FINDs run at the same time. This works because a FIND uses the read port only
every other cycle: a read cycle is always followed by a compare cycle. Its
write-back also comes one cycle after a compare. The walker starts FIND `Vb`
exactly one cycle after FIND `Va`. From then on, `Va` owns the odd cycles and
`Vb` the even ones, for both reads and write-backs, so no arbiter is needed.

One FIND may read a vertex while the other is compressing it. It then sees
either the old parent or the root, and both lead to the same root. The result
is therefore identical to running the two FINDs one after the other.

Assertions check that the two FINDs never drive the read or write port in the
same cycle, and that JOIN never overlaps a FIND. The walker's testbench also times single-edge
walks. Moving both end points three steps further from their roots must cost
6 more cycles, not the 12 of two back-to-back FINDs.

## Inside one tile (`tile_engine`)

A tile runs its phases in this order:

```
   load pixels ──► vertex_init ─────────────────┐   (in parallel)
               └─► edge_gen ─► edge_sort ───────┴─► seg_fsm (threshold) ─► finished
```

- **vertex_init** writes one vertex record per cycle.
- **edge_gen** reads the pixel RAM and emits the four edges of each pixel, or
  fewer at the tile border. It computes each weight with a combinational
  integer square root of the squared RGB distance.
- **edge_sort** is a counting sort over the 512 possible weights. It runs in
  four phases:
  1. clear the histogram;
  2. count the edges while storing them unsorted;
  3. form prefix sums;
  4. place each edge at its bin position in the edge RAMs.

  The sort is stable, so edges of equal weight keep the order in which they were
  generated.
- **seg_fsm** then merges by threshold inside the tile.

When a tile is finished, it raises `finished` and keeps its RAMs. The top then
sets `gsel`, which hands the read and write ports of all three RAM groups to the
shared logic.

## Joining the tiles: stitching (`stitch_unit`)

Each tile was segmented without seeing its neighbours. A region that crosses a
seam is therefore split into pieces. The stitch phase builds one edge per seam
pixel:

- **Horizontal seams** (between left and right tiles): the rightmost column of
  the left tile is paired with the leftmost column of the right tile. Only the
  straight-across edge `Va–Vb2` is used. The diagonals are left out.
- **Vertical seams** (between upper and lower tiles): the bottom row of the upper
  tile is paired with the top row of the lower tile. Only the straight-down edge
  `Va–Vb4` is used.

All horizontal seam edges come first, then all vertical ones. They are written
unsorted into the shared seam edge RAM: 8 × 36 + 4 × 32 = 416 edges at the
default size.

The shared `seg_fsm` then runs one threshold-mode pass over this list. Its FIND
and JOIN operations go through a router in the top. The router uses the tile
field of each label to send the access to the owning tile's vertex RAMs. Because
both tiles' components already carry their own thresholds, the same merge test
decides whether two pieces on either side of a seam belong together.

This is the part of the design most worth understanding before changing it. Three
points matter:

- *Why labels must be global.* After a seam merge, a root in tile 1 may have its
  parent in tile 0. Any later FIND must be able to follow that pointer out of
  tile 1's RAMs. This is why the label carries the tile number.
- *Why the seam edges need not be sorted.* Each seam pass sees only components
  whose thresholds are already settled, so the result depends little on the
  order. This is a departure from strict Kruskal order; see the list of
  departures below.
- *Order within the min-size phase.* The min-size pass walks tile 0's sorted
  list, then tile 1's, and so on up to the last tile, and then the seam list.
  Each tile list is sorted, but the sequence as a whole is not one global sort.

## Clean-up and output

**Min-size phase.** The shared `seg_fsm` runs in min-size mode over each tile's
edge RAMs in turn, and then over the seam edges. Every component smaller than
`cfg_min_size` is absorbed through the lightest edge (within its list) that
leaves it.

**Recolouring (`recolor_unit`).** This unit visits the image in raster order. For
each pixel it runs a FIND (with path compression) to get the final root, and it
emits:

- `out_valid`, `out_x` and `out_y`;
- `out_label`, the root label;
- `out_rgb = root × 0x9E3779 mod 2^24`.

The multiplier is odd, so the colour map is one-to-one: two different regions
never get the same colour.

**Top-level interface (`egs_hybrid_top`).**

| port | dir | width | use |
|---|---|---|---|
| `cfg_k`, `cfg_min_size` | in | 8, 24 | algorithm constants |
| `pix_we`, `pix_x`, `pix_y`, `pix_rgb` | in | 1, 8, 7, 24 | load one (already smoothed) pixel per cycle while idle |
| `start` | in | 1 | pulse to run |
| `busy`, `done` | out | 1 | `done` pulses after the last output pixel |
| `out_valid`, `out_x`, `out_y`, `out_label`, `out_rgb` | out | | segmented image stream |
| `stat_thr_merges`, `stat_stitch_merges`, `stat_minsize_merges`, `stat_cycles` | out | 32 | statistics |

All state uses an asynchronous active-low reset `rst_n`. Memory contents are not
reset, because every memory word is written before it is read.

## Timing

With the defaults and the test image of `tb_egs_full` (`k = 20`,
`min_size = 20`), one segmentation takes about 0.66 M cycles from `start` to
`done`. Running FIND `Va` and FIND `Vb` sequentially would take about 0.91 M
cycles. In that run:

- 8889 merges happen inside the tiles;
- 31 merges happen across the seams (22 horizontal, 9 vertical);
- 288 merges happen in the min-size phase.

The time is dominated by the serial edge generator, the counting sort and the
FIND-then-JOIN sequence of each edge. The original work reports 17.83 ms for
this image size with 8 tiles, but it gives no clock frequency, so the two cannot
be compared in cycles.

## Where this design departs from the original architecture

- **Smoothing is not included.** The original pre-filters the image with a
  Gaussian and a Laplacian controlled by a `sigma`. No kernel or number format is
  given for it, so the input port expects an image that is already smoothed.
- **Pipelining is only partial.** The two FINDs of an edge do overlap, and vertex
  initialisation runs beside edge generation and sorting. The original also
  starts merging as soon as the first sorted edges are stored, overlaps reads
  with JOIN, and overlaps the last threshold iteration with the first min-size
  iteration. Here those steps run one after another.
- **Edge generation is serial.** It is not row-parallel.
- **The sorting method is this design's choice.** It is a counting sort. The original
  does not say how it sorts.
- **The divider is this design's own.** The original used a vendor divider
  core. This design uses a plain restoring divider with the same function.
- **The weight is rounded down** to an integer, and the threshold saturates
  at 255. Both follow from the 16-bit weight and 8-bit threshold fields.
- **The seam edges are unsorted.** The vertical seams use the straight-down
  neighbour. The min-size phase walks the lists one tile at a time.
- **The tile arrangement is fixed at elaboration time.** It is
  `NCOL × NROW = 4 × 2`. Other `n` values, or the larger images of the original
  timing tables (256 × 144, 512 × 288, 1920 × 1080), need different `IMG_W`,
  `IMG_H`, `NCOL` and `NROW`. `IMG_W` must divide evenly by `NCOL`, and `IMG_H`
  by `NROW`.

## Verification

Each block has a testbench named `tb_<module>`. Each one compares the block
against values computed independently in the testbench. Each one also counts
checks and failures, prints `TB_RESULT checks=… failures=…`, and has a
watchdog. Every testbench has been run against a deliberately broken copy of its
block, and it reported failures each time.

The end-to-end tests are `tb_egs_hybrid_top` (32 × 24 in 2 × 2 tiles) and
`tb_egs_full` (the default 128 × 72 in 4 × 2 tiles, no parameter overrides).
Both use a synthetic image: flat rectangles that cross the seams, noise, and
isolated specks. They check the hardware against a behavioural model of the same
algorithm that uses the same pass order. The model is a plain union-find with
its own edge lists and its own stable sort. The tests check that:

- pixels are grouped identically, through a one-to-one map between hardware
  labels and model roots;
- each colour follows from its label;
- the merge counts of each kind agree with the model;
- threshold merges, horizontal-seam merges, vertical-seam merges and min-size
  merges each happen at least once.

The reference model follows the hardware's own ordering choices, such as the
order of seam edges and the tie-breaking in union by rank. It therefore confirms
that the RTL does what is described here. It does not show that the result
matches a software implementation of the algorithm pixel for pixel.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/egs_pkg.sv tb/tb_egs_full.sv \
          --top-module tb_egs_full -o sim && ./obj_dir/sim
```

Replace `tb_egs_full` with any other testbench, for example
`tb_egs_hybrid_top` or `tb_join_unit`. The full-size run takes well under a
minute. To try another image size, edit the `localparam`s at the top of
`tb_egs_hybrid_top.sv`. It instantiates the top with `#(IMG_W, IMG_H, NCOL,
NROW)`.

## Files

- `rtl/egs_pkg.sv`: widths, record types, the merge-mode enum, the saturating
  threshold helper and the RGB distance function.
- `rtl/sdp_bram.sv`, `vertex_store.sv`, `edge_store.sv`: memories.
- `rtl/vertex_init.sv`, `edge_gen.sv`, `edge_sort.sv`: per-tile set-up.
- `rtl/find_unit.sv`, `join_unit.sv`, `seq_divider.sv`, `seg_fsm.sv`:
  union-find datapath and its controller.
- `rtl/tile_engine.sv`: one tile.
- `rtl/stitch_unit.sv`: seam edges.
- `rtl/recolor_unit.sv`: output stream.
- `rtl/egs_hybrid_top.sv`: the top.
- `tb/tb_common.svh`: clock, reset, check counting and watchdog.
- `tb/tb_vmem.sv`: a behavioural vertex memory for the unit tests.
- `tb/egs_e2e_body.svh`: the shared end-to-end test and its reference model.
