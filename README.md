# Streaming k-nearest-neighbour graph construction for Vision GNNs

Vision graph neural networks (ViGs) treat an image as a graph. Each image patch is a
node with a feature vector. Before every GNN layer the graph is rebuilt from the current
features. Each node is connected to its nearest "co-nodes" in feature space. This step,
dynamic image graph construction (DIGC), is a dilated k-nearest-neighbour search:

    dist(i, j) = ||x_i - y_j||^2 + P(i, j)        i < N nodes, j < M co-nodes
    I(i, :)    = every d-th of the k*d co-nodes with the smallest dist(i, j)

`X` (N x D) holds the node features. `Y` (M x D) holds the co-node features; in pyramid
ViGs these are the node features pooled by a factor r in each direction. `P` (N x M) is a
relative positional term added to every distance. The result `I` (N x k) lists the
neighbour indices of each node.

The RTL here computes `I` from `X`, `Y` and `P` held in external memory. It never builds
the full N x M distance matrix. Distances are made in small tiles by a mesh of
multiply-accumulate processing elements. Each tile is sorted locally as soon as it is
complete. A heap then merges the sorted pieces of each node's row, and only the first
k*d entries are kept. On-chip storage therefore depends on the tile sizes, not on N or M.
The architecture follows the FPGA accelerator described by Ramachandran, Parikh and
Prasanna ("Accelerating Dynamic Image Graph Construction on FPGA for Vision GNNs"). The
section "Where this RTL departs from the published design" lists the differences.

## Tiling: row blocks, partitions, column blocks

Three sizes organise the work. The defaults are those of the published implementation.

| name     | default | meaning |
|----------|---------|---------|
| `P_ROW`  | 8  | nodes per row block: rows of the distance mesh |
| `P_COL`  | 8  | co-nodes per column block: columns of the distance mesh |
| `P_VEC`  | 8  | feature elements each PE consumes per cycle |
| `M_PART` | 28 | co-nodes per partition: the length of one locally sorted list |
| `Q`      | 8  | partitions per row: the ways of the final merge |
| `P_SORT` | 8  | merge-sort PEs |
| `P_NSM`  | 8  | neighbour-selection PEs |

The co-node axis is cut into `ceil(M / M_PART)` partitions, with at most `Q`. Each
partition is covered by `ceil(M_PART / P_COL)` column blocks (4 at the defaults). The
last block overhangs the partition by 4 columns, and those columns are masked off. For
each row block of `P_ROW` nodes the controller (`digc_top`) runs:

1. **Load** the block's node vectors into the partition buffer.
2. For every partition `q`, and every column block in it:
   load the `P_COL` co-node vectors and the `P_ROW x P_COL` entries of `P`; run the
   distance mesh; write the `P_ROW x P_COL` distances into the partial sum buffer (PSB)
   at partition `q`. The co-node and P part of the partition buffer has two sets. The
   next column block is loaded into one set while the mesh reads the other, so
   **loading overlaps the mesh**.
   When partition `q` is complete, start the local sorter on it and go straight on to
   partition `q+1`. **Sorting partition `q` overlaps loading and computing `q+1`.**
3. Wait for the last sort. Then, for each node of the block, run the **global merge**.
   It merges the node's `Q` sorted partition lists into the heap buffer (HB) and keeps
   the first k*d entries.
4. Run **neighbour selection** on all rows at once. Positions 0, d, 2d, ... (k-1)d go
   into the output buffer (OB).
5. **Write** the block's `P_ROW x k` indices to external memory, then start the next row
   block.

Rows past N and columns past M or past the partition end are masked. Their distance is
`DIST_INF`, so they sort after every real candidate. Each merge stream has a length
register, so the heap never takes such an entry.

## Distance computation module (`dcm`)

The mesh has `P_ROW x P_COL` processing elements (`matmul_pe`). PE (r, c) accumulates
the dot product `<x_r, y_c>`, `P_VEC` products per cycle. One `elementwise_mult` per mesh
row and one per mesh column accumulate the squared norms `||x_r||^2` and `||y_c||^2` in
the same cycles. A `summing_module` per PE forms

    ||x||^2 + ||y||^2 - 2<x, y> + P(r, c)

which is the squared Euclidean distance written in the form that needs only one
multiplier per lane in each PE. All banks of the partition buffer are read at the same
word address. The node word of row r is broadcast along mesh row r, and the co-node
word of column c along mesh column c.

A block takes `ceil(D / P_VEC)` accumulate cycles, plus 3 cycles: buffer read latency,
the sum, and the output register. `done` comes `ceil(D/P_VEC) + 3` cycles after `start`,
and the block of candidates (distance and co-node index) stays valid until the next
start.

## Sorting in two levels

This is the least obvious part of the design. A node has M candidates spread over up to
`Q` partitions. It needs the first k*d of them in order.

**Local sort (`lsm`, `lsm_sort_pe`).** Each sorting PE owns one row of a partition. It
copies the `M_PART` entries out of the PSB into a local buffer, then runs a bottom-up
merge sort. Pass p merges runs of length 2^p into runs of length 2^(p+1). Each pass
writes one element per cycle, reading the two run heads from one local buffer and
writing the other. After `ceil(log2 M_PART)` passes (5 for 28) the row is copied back in
place. One row takes `M_PART*ceil(log2 M_PART)` merge cycles (140), plus `2*M_PART` copy
cycles and one handshake cycle: 197 cycles. When `P_SORT < P_ROW`, the rows are sorted in
`ceil(P_ROW/P_SORT)` rounds. Each PSB row has its own port, so all PEs of a round work at
the same time.

**Global merge (`gmm`).** The merge works on one node row at a time, over `Q` sorted
streams, one per partition:

* *Build.* The head of each non-empty stream is inserted into a min-heap of `Q` entries
  kept in registers. Each entry records its candidate, its stream and its position in
  that stream. An insertion sifts up one level per cycle.
* *Extract.* The root is the smallest remaining candidate. It is written to the next HB
  position. It is then replaced by the next element of its own stream. If that stream is
  exhausted, the last heap entry takes its place and the heap shrinks. The new root sifts
  down one level per cycle.
* The merge stops after k*d outputs. If the streams together hold fewer than k*d
  candidates, the remaining HB slots are filled with empty entries.

Each output costs at most `2 + ceil(log2 Q)` cycles (5 at Q = 8). The local sort makes
every stream ascending, so the heap only ever needs one element per stream. This keeps
it at Q entries however large M is.

Ordering is on (distance, co-node index): equal distances go to the smaller index. The
merge sort is stable and the heap compares the full pair, so the output is fully
deterministic. A software reference that sorts by the same key gives the same indices
bit for bit.

## Neighbour selection (`nsm`) and output

`P_NSM` selection PEs read the HB rows in parallel. PE i takes row `round*P_NSM + i`. In
cycle s every PE reads HB position `s*d` of its row and writes its co-node index to OB
slot s. A block takes `ceil(P_ROW/P_NSM) * k` cycles. The controller then writes the OB
to memory, one index per write.

## Buffers

| buffer | module | contents | size at defaults |
|--------|--------|----------|------------------|
| partition buffer | `partition_buffer` | `P_ROW` node vectors, `P_COL` co-node vectors, `P_ROW x P_COL` entries of P | 3 x 8 banks x 128 words x 64 b (X, two Y sets), 2 x 64 x 16 b |
| partial sum buffer | `partial_sum_buffer` | distances of the row block, `P_ROW x Q x M_PART` candidates | 1792 x 48 b |
| heap buffer | `heap_buffer` | first k*d merged candidates per row | 8 x 32 x 48 b |
| output buffer | `output_buffer` | k indices per row | 8 x 16 x 16 b |

A candidate is 48 bits: a 32-bit distance and a 16-bit index. The buffers are written as
register arrays with combinational reads, except the partition buffer, which reads like a
block RAM with one cycle of latency.

## Interface (`digc_top`)

Job inputs are sampled on `start` while idle: `n_nodes` (N), `n_conodes` (M), `dim`
(D), `k`, `dil` (d), and the four base word addresses. `busy` stays high until the job
ends. `done` pulses once.

External memory is word addressed. One word holds `P_VEC` 8-bit features (64 bits at the
defaults):

| matrix | element | word address | lane |
|--------|---------|--------------|------|
| X | node i, feature e | `x_base + i*DW + e/P_VEC` | `e % P_VEC` |
| Y | co-node j, feature e | `y_base + j*DW + e/P_VEC` | `e % P_VEC` |
| P | (i, j), 16 bits | `p_base + i*PW + j/4` | `j % 4` |
| I | node i, slot s | `i_base + i*k + s` | low 16 bits |

Here `DW = ceil(D/P_VEC)` and `PW = ceil(M/4)`. Feature lanes past D must be zero.

* **Read port.** `rd_req`/`rd_addr` are held until `rd_gnt`. Data comes back on
  `rd_rvalid`/`rd_rdata` in request order, after any latency. Requests run ahead of
  responses without limit.
* **Write port.** `wr_req`/`wr_addr`/`wr_data` are held until `wr_gnt`.
* **Assertions** in `digc_top` check three rules. A pending read request must not drop
  or change address. A job must fit the built sizes. A response must arrive only during a
  load.

A job must satisfy `M <= Q*M_PART` (224), `D <= D_MAX` (1024), `k <= K_MAX` (16),
`k*d <= KD_MAX` (32) and `k*d <= M`.

## Number format

Features are signed 8-bit integers and `P` is signed 16-bit. Distances are exact signed
32-bit integers. With 8-bit features, `||x||^2 + ||y||^2 + 2|<x,y>|` stays below 2^26
for D up to 1024, so the distance cannot overflow. The published design keeps 32-bit
floating-point distances. The widths (32-bit distances, 16-bit indices) are the same, but
the arithmetic is integer. Changing `FEAT_W` and `PE_W` in `digc_pkg` changes the formats.
A floating-point version would replace the MAC lanes and `cand_lt`.

## Performance

At the defaults, a ViG-Tiny graph (N = M = 196, D = 192, k = 8, d = 2) takes about
222,000 cycles in simulation, with a memory that withholds its grant 5% of the time. That
is roughly 0.37 ms at 600 MHz. Loading dominates: each column block reads `P_COL*DW` = 192
co-node words and 64 P words through the single 64-bit read port. The distance mesh is
busy for only 27 of those cycles, and it runs while the next block loads. With a single
set, the mesh would wait for each load, and the same job would take about 241,000 cycles.
The published per-module cycle model for the same graph counts 4,704 DCM cycles (with a
14 x 14 mesh) and assumes that loading is hidden. This RTL does not reach that. The bus
width and the P packing are this design's own choices, because the published design does
not give them. The sort, merge and selection stages are close to the published model:

* 197 cycles per 28-entry row sort, against 140 in the model;
* at most 5 cycles per merged output;
* k cycles per selection round.

## Where this RTL departs from the published design

* **Configuration.** The published text gives two configurations. The implemented one
  (8 x 8 mesh, P_vec 8, P_sort 8, Q 8, m 28) is the default here. A 14 x 14 mesh with
  P_sort = Q = 7 is used only in the published cycle estimates.
* **Local sort.** The published pseudo-code for the sorting PE is a partial selection
  sort of the first k entries. Its prose, figure and cycle formula describe merge sort,
  which is what is built.
* **Heap buffer.** The published text says the heap buffer holds the locally sorted
  partitions. Its block diagram places it between the merge and neighbour selection.
  Here the sorted partitions stay in the PSB, and the heap buffer holds the merged top
  k*d lists.
* **Row blocks in sequence.** The published pipeline figure starts loading the next row
  block while the merge, selection and write-out of the current one run. Here the next
  row block starts after the write-out, because a second partial sum buffer would be
  needed. At the defaults this costs about 8% of the ViG-Tiny run time (16,800 of
  222,000 cycles).
* **One merge unit.** There is a single merge unit, used row by row. This matches the
  published cycle model `N*k*ceil(log2 Q)`. The published figure calls the merging
  parallel across rows.
* **Norms.** Squared norms are computed once per vector in the element-wise units. The
  published per-PE pseudo-code recomputes them inside every PE.
* **Mesh wiring.** Mesh operands are broadcast rather than passed from PE to PE.
* **Number format.** Integers instead of floats (see "Number format").
* **Not described in the source, and chosen here:** the controller, the loader, the
  memory layout and ports, the two-set (ping-pong) buffering of the partition buffer, the reset
  scheme (asynchronous active-low reset of control state only), the tie order and the
  buffer port structures.
* **Limit on M.** M is limited to `Q*M_PART` = 224 co-nodes per job. This covers ViG
  graphs at 224 x 224 input (196 co-nodes) and the smaller pyramid stages. The published
  evaluation also runs resolutions from 256 x 256 to 2048 x 2048, where M reaches
  (R/16)^2 co-nodes (256 to 16,384). The published text does not explain how more than
  `Q` partitions are merged. At the default sizes this RTL cannot run those jobs; it
  would need a larger `Q` (and a wider heap) or a multi-pass merge.

## Simulation

Every module's testbench is in `tb/` and is self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`. To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/digc_pkg.sv tb/tb_gmm.sv \
              --top-module tb_gmm -o sim && obj_dir/sim

| testbench | what it checks |
|-----------|----------------|
| `tb_elementwise_mult`, `tb_matmul_pe`, `tb_summing_module` | arithmetic against sums computed in the bench |
| `tb_partition_buffer`, `tb_partial_sum_buffer`, `tb_heap_buffer`, `tb_output_buffer` | every port against a model |
| `tb_dcm` | distances and masks of a 3 x 2 mesh; latency `ceil(D/P_VEC)+3` |
| `tb_lsm_sort_pe` | 28-entry sorts with repeated distances and empty slots; 197 cycles |
| `tb_lsm` | 5 rows on 2 PEs (three rounds), in place, other partitions untouched |
| `tb_gmm` | merges of 1-4 streams with partial and empty streams and repeats; k*d cut-off and empty fill; cycles per output |
| `tb_nsm` | dilated selection for random k, d; `ceil(P_ROW/P_NSM)*k` cycles |
| `tb_digc_top` | four jobs at reduced sizes through the whole design, every index against a reference, with a stalling memory |
| `tb_digc_full` | the default configuration on the ViG-Tiny graph (196 x 196, D = 192, k = 8, d = 2), every index checked |

`tb_digc_top` also counts how often each mechanism occurred, and fails if one never did:

* loading overlapped with the mesh;
* sorting overlapped with loading or the mesh;
* a second sort round;
* masked rows;
* masked columns;
* a merge stream that ran dry;
* memory back-pressure.

The full-size bench runs in well under a second of wall-clock time. `digc_harness` holds the
job driver and the reference model. `ddr_model` is a behavioural memory with random
grant stalls and fixed read latency.

## Files

`rtl/digc_pkg.sv` holds the shared types (`cand_t`, `cand_lt`). The datapath units are
`matmul_pe`, `elementwise_mult` and `summing_module`, grouped in `dcm`. The sorters are
`lsm_sort_pe` and `lsm`, and the merge is `gmm`. Neighbour selection is `nsm`. The
buffers are `partition_buffer`, `partial_sum_buffer`, `heap_buffer` and `output_buffer`.
`digc_top` is the top level, holding the controller and the loader.
