# HyScale-GNN accelerator kernel: scatter-gather aggregation and systolic update in SystemVerilog

HyScale-GNN trains graph neural networks on one server that holds several
CPUs and several accelerators. CPU threads sample mini-batches, gather their
input features out of the (very large) CPU memory and copy them over PCIe.
CPUs and accelerators then both train on the mini-batches, and the gradients
are averaged on a CPU. Nearly all of that is host software. The one piece of
hardware is the GNN propagation kernel on each FPGA. It runs the layers of a
GCN or GraphSAGE model over one sampled mini-batch. Two ideas shape it:

* **Read each source feature once.** The edges of a mini-batch are sorted by
  source vertex. A feature fetched from device memory is copied into every
  scatter PE and reused by every edge that leaves that vertex. Input traffic
  then grows with the number of vertices, not with the number of edges.
* **Keep intermediate results on chip.** Aggregated rows go straight from
  the aggregation buffers into the update array. One layer's output goes
  straight back into the next layer's aggregation. Only the final embeddings
  leave the kernel.

This repository gives RTL for the forward pass of that kernel, at the sizes
of the published FPGA build: n = 8 scatter-gather PE pairs and m = 2048
multiply-accumulate units. The host runtime, the sampler, the feature loader,
the gradient synchroniser and the dynamic load balancer are software in the
original system, so they are not here. Backward propagation is not here
either (see "Departures").

## 1. What one layer computes

For every destination vertex `v` of layer `l`:

    a_v = [ sum over edges (u->v, slot 0) of w_uv * h_u  ||  sum over edges (u->v, slot 1) of w_uv * h_u ]
    h_v = act( a_v * W^l + b^l ),   act = ReLU or identity (chosen per layer)

The host gives each edge a weight `w_uv` and a one-bit `slot`. With these,
both models use the same hardware:

| model     | edges sent                                              | weight            | slot | row width |
|-----------|---------------------------------------------------------|-------------------|------|-----------|
| GCN       | every sampled edge plus a self loop                     | 1/sqrt(D(u)D(v))  | 0    | f         |
| GraphSAGE | every sampled edge                                      | 1/deg(v) (mean)   | 0    | 2f        |
|           | one self edge v->v                                      | 1.0               | 1    |           |

For GraphSAGE, slot 1 holds the second half of the row, so the row is the
concatenation `mean(h_u) || h_v`. Layer `l`'s weight matrix then has `2f`
rows.

Data move in **beats** of `VEC = 16` elements (512 bits, one DDR word). An
element is a 32-bit signed fixed-point number with 16 fraction bits. A
multiply keeps the floor of the exact product (`fx_mul` in `hyscale_pkg`).
Sums wrap modulo 2^32.

## 2. Aggregation: `aggregate_kernel`

```
  sorted edges ──► dispatcher ──► scatter PE 0..7 ──► routing network ──► gather PE 0..7 ──► update kernel
                       │                ▲                (dst mod 8)       (+ intermediate
  device memory ──► feature duplicator ─┘ broadcast                          result rows)
  result buffer ──┘  (layer ≥ 2)
```

* **Dispatcher.** It holds one edge at a time. If the edge's source is the
  feature already loaded, it gives the edge to the lowest-numbered idle
  scatter PE, at most one edge per cycle. If the source is new, it first
  waits until every scatter PE is idle. Then it has the duplicator fetch the
  new feature. PEs with no edge stay idle during the fetch. Example with
  four PEs and edges (0,0) (0,2) (0,5) (1,2): X0 is read once and used three
  times. The fourth PE waits until X1 has been read. Unsorted edges still
  give correct sums, but their features are fetched again.
* **Feature duplicator** (`feature_duplicator`). It reads the beats of the
  feature, either from device memory (a request/response port with any
  latency and back-pressure) or from the on-chip result buffer (layers 2 and
  up). Each beat is written into all eight scatter-PE copies through eight
  register copies of the broadcast bus.
* **Scatter PE** (`scatter_pe`). It keeps the current feature in a local
  memory of up to `B_MAX` beats. For each edge it streams the beats back,
  multiplied by the edge weight and tagged with `(dst, beat position)`. Slot
  1 shifts the beat position by `in_beats`.
* **Routing network** (`routing_network`). A full crossbar. Gather PE `k`
  owns every destination with `dst mod 8 == k`. Each output has a
  round-robin arbiter. A scatter PE that loses is held (ready low), so beats
  of one PE stay in order. Outputs are registered.
* **Gather PE** (`gather_pe`). It adds each beat into row `dst / 8` of its
  intermediate-result buffer with a one-cycle read-modify-write. Before a
  layer, a clear pass zeroes the rows and beats that the layer uses, one beat
  per cycle.

The kernel counts feature fetches, edges and cycles with a routing conflict.
The host can read these as a profile of the layer.

## 3. Update: `update_kernel` and `systolic_array`

The weight matrix is cut into tiles of `ROWS x COLS = 16 x 128` (2048 MAC
cells, `mac_unit`). The loop order is output tile `ot`, then input tile `it`.
For each pair, the tile is loaded and all `num_dst` vertices stream through,
one per cycle. Each vertex contributes beat `it` of its aggregated row.

* **Dataflow of the array (weight-stationary).** Element `r` of a vertex's
  beat is delayed `r` cycles by a skew buffer and shared across row `r`.
  Partial sums move down the columns one row per cycle. Column `c` delivers
  `sum_r a[r]·W[r][c]` exactly `ROWS` cycles after the vertex entered.
* **Tiles need no drain.** Row `k` of the next tile's weights is loaded `k`
  cycles after the last vertex of the current tile entered. That is just
  after that vertex has passed row `k`. The first vertex of the new tile
  enters one cycle after row 0 is loaded. One tile therefore takes
  `max(ROWS, num_dst + 1)` cycles. A layer takes
  `out_tiles · in_tiles · max(16, num_dst + 1) + 17` cycles after its start
  cycle. The testbench checks this exactly.
* **Result buffer.** Column sums are added into row `(v, ot)`. The first
  input tile writes instead of adding, so the buffer is never cleared.
* **Bias and activation on read.** Bias and ReLU are applied when the
  buffer is read, either by the next layer's duplicator or by the output
  stream. The stored sums stay exact.

## 4. Sequencing a forward pass: `hyscale_kernel` (top)

For each layer in turn: aggregate, then update. Layer 1 fetches its sources
(rows of the mini-batch feature matrix X') from device memory. Later layers
fetch them from the result buffer, where a source id is a destination index
of the layer below. After the last layer, the top streams the embeddings on
`out_*`: vertex by vertex, `out_tiles · COLS/16` beats per vertex, with
valid/ready. `done` pulses after the last beat.

Host programming:

| port                  | meaning |
|-----------------------|---------|
| `wt_wr_*`             | one row of 128 weights, address `(layer·2·F_MAX + input row)·⌈FOUT_MAX/128⌉ + output tile` |
| `bias_wr_*`           | 128 biases, address `layer·⌈FOUT_MAX/128⌉ + output tile` |
| `cfg[l]`              | `in_beats` (⌈f/16⌉), `concat` (GraphSAGE), `num_dst`, `out_tiles` (⌈f_out/128⌉), `relu` |
| `edge_*`              | edges of layer 1, then layer 2, each layer sorted by source and closed by `last` |
| `mem_*`               | read port to X' in device memory: beat requests with valid/ready, in-order responses |
| `stat_*`              | fetches, edges, conflict cycles, total cycles of the last operation |

Layer `l+1`'s `in_beats` must equal layer `l`'s `out_tiles · 8`; an
assertion checks this. Pad features, weights and biases with zeros up to
whole beats and tiles.

## 5. Parameters

| parameter  | default | origin |
|------------|---------|--------|
| `N_PE`     | 8       | published FPGA build (n = 8 scatter-gather PEs) |
| `ROWS x COLS` | 16 x 128 | m = 2048 MACs from the published build; the shape is this design's |
| `N_LAYERS` | 2       | the evaluated two-layer models |
| `F_MAX`    | 768     | largest input feature in the evaluation (756), rounded up |
| `FOUT_MAX` | 256     | hidden size 256; output widths 47 to 172 |
| `DST_MAX`  | 32768   | own choice: a batch of 1024 targets with fan-out 25 gives at most 26,624 destinations |
| `VEC`, `DATA_W`, `FRAC_W` | 16, 32, 16 | own choice (package constants) |

Memory at the defaults: the intermediate-result buffers hold 8 × 4096 rows ×
96 beats (201 MB), the result buffer 32768 × 256 elements (32 MB) and the
weight buffer 2 × 1536 × 256 elements (3 MB). These sizes hold every
evaluated dataset and model (ogbn-products, ogbn-papers100M, MAG240M with
GCN and GraphSAGE) in one pass. However, the intermediate-result buffers
alone are far larger than the 54 MB of on-chip RAM of an Alveo U250. Use
smaller `DST_MAX` or `F_MAX` values to fit a real device. A three-layer
model, as in the (15, 10, 5) sampling setting, needs `N_LAYERS = 3` and a
larger `DST_MAX`.

## 6. Departures from the original design

* **Fixed point.** The original computes in 32-bit floating point. Here it
  is 32-bit fixed point, so that every result can be checked bit for bit.
* **Aggregation and update run one after the other.** The original
  pipelines them. With edges sorted by source, a destination row is complete
  only after the last edge. No overlap scheme is described, so none is
  built.
* **Forward pass only.** The original uses the same operators in reverse
  for back-propagation and produces weight gradients. That is not built.
  Weight gradients and gradient output are missing.
* **Interfaces are this design's own.** This covers the handshakes, the
  host ports, the edge encoding (weight + slot), `dst mod 8` ownership,
  round-robin routing, the clear pass, deferred bias/ReLU, the array shape
  and its dataflow, and the buffer sizes. The original names these blocks
  or gives their function, but not these details.
* **Host software is not built.** This covers the host-side pipeline
  (sampling, feature loading, PCIe transfer, two-stage prefetching),
  synchronisation and the dynamic resource manager.

## 7. Simulation

Every module is in `rtl/<name>.sv`, with shared types in
`rtl/hyscale_pkg.sv`. Each testbench in `tb/` checks against its own
software model and ends with `TB_RESULT checks=N failures=M`:

| testbench                  | what it checks |
|----------------------------|----------------|
| `tb_feature_duplicator`    | beats to every PE copy in order, memory latency/back-pressure, on-chip fetch timing |
| `tb_scatter_pe`            | weight scaling, tags and offsets, reuse of the stored feature, one beat per cycle |
| `tb_routing_network`       | ownership, per-input order, no loss, conflicts stall, full rate without conflicts |
| `tb_gather_pe`             | clear timing and extent, exact accumulation including back-to-back hits |
| `tb_systolic_array`        | column sums, latency of ROWS cycles, tile change without drain |
| `tb_update_kernel`         | a·W+b with and without ReLU, several tiles, exact cycle count |
| `tb_aggregate_kernel`      | whole scatter-gather layer from memory and from on chip, one fetch per source |
| `tb_hyscale_kernel`        | two full two-layer passes (GraphSAGE, GCN) at reduced sizes; every mechanism must occur |
| `tb_hyscale_kernel_full`   | the same at the default sizes with 100 → 256 → 47 features |

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_hyscale_kernel_full rtl/hyscale_pkg.sv tb/tb_hyscale_kernel_full.sv
./obj_dir/Vtb_hyscale_kernel_full
```

The full-size test builds in about 15 s. It simulates in under a second and
uses about 250 MB of memory, mostly for the on-chip buffers. The two
end-to-end testbenches share their stimulus and reference model through
`tb/tb_hyscale_body.svh`.
