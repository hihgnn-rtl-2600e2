# HiHGNN: a multi-lane accelerator for heterogeneous graph neural networks

A heterogeneous graph has several vertex and edge types. An HGNN such as HAN splits it into
semantic graphs, one per relation or metapath, and runs four stages on it:

1. project every vertex's raw feature into a common hidden space (FP);
2. aggregate neighbours with attention inside each semantic graph (NA);
3. score each semantic graph (LSF);
4. fuse the per-graph results with a Softmax over the graphs (GSF).

The accelerator described in "HiHGNN: Accelerating HGNNs through Parallelism and Data Reusability
Exploitation" rests on three ideas:

- **Stage fusion.** A vertex's projection, attention coefficients and aggregation are computed in
  one pass, edge by edge. Intermediate results are never written back as whole matrices.
- **Reuse.** A projected feature or attention coefficient computed for one semantic graph is
  kept and reused. A per-vertex bit vector, the Reuse Attribute Buffer (RAB), says what already
  exists.
- **Lanes.** Several independent lanes share the work. Each lane has a buffer of partial
  aggregates. A workload-aware scheduler caps the edges per lane per period and sends the excess
  to other lanes. The partial results are merged on the vertex's home lane.

This SystemVerilog implements that accelerator for the HAN model, end to end: FP, NA, LSF, GSF and
the final normalisation. It follows the publication's multi-lane organisation (its Fig. 9(a)) and
the buffer and array sizes it states. Where the publication is silent, the choices made here are
listed in this document and in the header comment of each file.

## Arithmetic

All data are 32-bit signed Q16.16 fixed-point words (`hihgnn_pkg::word_t`). The publication only
says "32-bit integer"; the 16-bit fraction is a choice made here.

- Multiply truncates toward minus infinity (`fx_mul`).
- Divide truncates toward zero, and a zero divisor gives zero (`fx_div`).
- `exp` is computed as 2^(x·log2 e): a 16-entry table of 2^(k/16) plus a linear correction.
  It saturates above x = 11 and returns 0 below x = −12.
- `tanh`, ELU and the Softmax numerators are all built on `exp`.
- LeakyReLU uses slope 0.2.

On the test graph, results differ from a real-valued model by less than 0.003.

## Block diagram

```
            +------------------------------- hihgnn_top ---------------------------------+
 HBM <----> | mem_access_ctrl  <--- global_scheduler ---- RAB, FP-Buf, Att-Buf            |
 (line      |   ^ (result writes)    |  shared Systolic Module (96 x 8x8), LSF SIMD + tanh |
  port)     |   |                    v edge tasks  (local_scheduler picks the lane)        |
            |   |              crossbar_switch (5 in, 4 out)                               |
            |   |          lane0   lane1   lane2   lane3   (queue, NA-Buf, SIMD, act.)     |
            |   |             \______ DRAIN/MERGE of partials via crossbar ______/         |
            |   +--- gsf_unit (outside SIMD Module, exp, SF-Buf)                           |
            +------------------------------------------------------------------------------+
```

## Operation, per semantic graph P

The top is driven by configuration ports: graph and type base addresses, counts and `threshold`.
A run starts on `start` and ends on `done`.

1. **Setup.** The RAB's theta bits are cleared; its projected bits are cleared only at the start
   of a run. All NA-Bufs are cleared. The graph's LSF bias b and vector q are read from memory.
2. **Edge walk.** Edges are one word each, {source vid, target vid}, with vid = {type[1:0],
   index[13:0]}. They are stored 128 per line and sorted by target. For each edge (u, v), the
   global scheduler handles v (target role) and then u (source role):
   - Read the vertex's RAB bits {projected, theta_src, theta_dst}. If the needed theta bit is
     already set, the coefficient is reused.
   - Otherwise get h': from the FP-Buf (hit); or from the HBM spill area if the vertex was
     projected but later evicted; or by projecting its raw feature on the Systolic Module.
     A projection uses 64 x 96 weights per slice, streamed in 96-word slices. Weight tiles are
     reloaded only when the tile set changes. A new projection is written to the FP-Buf and to
     the spill area.
   - Compute the pair theta_{u,*} = a1·h' and theta_{*,v} = a2·h' on the Systolic Module, and
     store it in the Att-Buf.
   - Hand the edge to a lane through the crossbar, as {target index, theta_u, theta_v, h'_u}.
3. **Lane work (NA).** The lane computes e = exp(LeakyReLU(theta_u + theta_v)), then updates
   z += e·h'_u and den += e in its NA-Buf entry. The Softmax is split as in the publication's
   Fig. 6: the numerator is used at once and the denominator is accumulated. No maximum is
   subtracted.
4. **Vertex completion.** When the target changes, the scheduler waits for all lanes to become
   idle. Every other lane that holds a partial of v (the local scheduler's aggregation mask)
   sends it to v's home lane (DRAIN, then MERGE). The home lane then computes
   z_v = ELU(z / den).
5. **LSF.** w_v = q · tanh(W z_v + b). W is held in the Systolic Module; the sum uses the SIMD
   module's reduction. w_v is added to wsum.
6. **GSF.** w_P = wsum / |V^P|, then e_P = exp(w_P) and beta += e_P. For every target,
   SF-Buf[v] += e_P · z_v^P.

After the last graph comes the **Final** step: h_v = SF-Buf[v] / beta for every output vertex,
written to `out_base + v`.

**Lane scheduling.** The home lane of graph P is P mod 4. The local scheduler counts the tasks
given to each lane in the current period. A task goes to its home lane while that lane's count is
below `threshold`. Otherwise it goes to the least-loaded lane still below threshold: the overflow
workload (OW). When every lane is at threshold, the task waits. A period ends when a target vertex
completes, or when all lanes are idle while a task waits.

## Memory layout (one HBM line = 128 words = 512 B)

| Region | Address | Contents |
|---|---|---|
| edges of graph g | `g_edge_base[g] + e/128` | word e%128 = {src vid, dst vid} |
| raw feature of vertex i, type t | `t_raw_base[t] + i*t_raw_lines[t] + s` | slice s, 96 words |
| projection tile of type t | `t_w_base[t] + s*96 + a` | word j*8+i = W[j][i] of array a = g*8 + b |
| attention tiles of graph g | `g_att_base[g] + k` | words 0..7 = a1 block k, words 8..15 = a2 block k |
| LSF tiles of graph g | `g_lsf_base[g] + a` (a < 64), then b, then q | |
| projected-feature spill | `t_proj_base[t] + i` | written by the accelerator |
| results | `out_base + v` | final h_v, 64 words |

## Files

| File | Block | Notes |
|---|---|---|
| `rtl/hihgnn_pkg.sv` | types, Q16.16 helpers | |
| `rtl/systolic_array.sv` | 8x8 weight-stationary MAC array | latency 2N = 16 |
| `rtl/systolic_module.sv` | 96 arrays; cooperative (64x96 MVM) or independent mode | latency 17 |
| `rtl/simd_core.sv`, `rtl/simd_module.sv` | 8-way cores, 128 per module, plus a reduction | 1 cycle (+1 for the sum) |
| `rtl/activation_module.sv` | ReLU, LeakyReLU, ELU, exp, tanh | 1 cycle |
| `rtl/rab.sv` | 3 bits x 4 types x 16384 | clear sweep of 1 entry per cycle |
| `rtl/fp_buf.sv` | 9994 x 64 words, direct mapped (2.44 MB) | |
| `rtl/na_buf.sv` | 14868 x (64+1) words per lane (14.52 MB for 4 lanes) | |
| `rtl/sf_buf.sv` | 491 x 64 words (0.12 MB), accumulate | |
| `rtl/att_buf.sv` | theta_src and theta_dst per vertex index | |
| `rtl/crossbar_switch.sv` | 5 x 4 valid/ready crossbar, round-robin | |
| `rtl/local_scheduler.sv` | threshold / OW lane choice, aggregation mask | |
| `rtl/hihgnn_lane.sv` | task queue, NA-Buf, SIMD Module (8 cores), activation | |
| `rtl/gsf_unit.sv` | outside SIMD Module, exp, SF-Buf; GSF and Final | |
| `rtl/mem_access_ctrl.sv` | 2 requesters to one HBM line port, in-order reads | |
| `rtl/global_scheduler.sv` | edge walk, FP, theta, dispatch, merge, LSF, GSF control | |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO | |
| `rtl/hihgnn_top.sv` | top | |

Sizes follow from the publication's numbers: hidden size 64 (256 B per vector); FP-Buf 2.44 MB;
NA-Buf 14.52 MB over 4 lanes; SF-Buf 0.12 MB; 96 arrays of 8x8 MACs; 128 8-way SIMD cores;
4 lanes. 512 GB/s at 1 GHz gives the 512 B line.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=M`.

- **Unit tests:** `tb_systolic_array`, `tb_systolic_module`, `tb_simd_core`, `tb_simd_module`,
  `tb_activation_module`, `tb_rab`, `tb_fp_buf`, `tb_na_buf`, `tb_sf_buf`, `tb_att_buf`. They
  compare against reference models, and check latencies cycle-exactly.
- **`tb_hihgnn_top`:** a small configuration (hidden 8, 2 arrays, FP-Buf of 4 lines, threshold 2).
  The test graph has 2 vertex types, 11 vertices and 3 semantic graphs, with high-degree targets.
  Results are compared with a real-valued HAN model computed in the testbench. It also checks that
  each mechanism happened at least once: projection; FP-Buf hit; eviction and re-fetch;
  coefficient reuse; weight-reload skip; overflow to a non-home lane; partial merge; waiting for a
  lane; result write; work on every lane. It also checks that every edge was aggregated once and
  every vertex projected once.
- **`tb_hihgnn_top_full`:** the same test on the top at its default (paper-sized) parameters.
  It builds in about a minute and runs in under a second. Its deviation from the real-valued
  model is below 0.003.
- `tb/hbm_model.sv` is a fixed-latency behavioural memory used by both top-level tests.

The crossbar, local scheduler, lane, GSF unit, memory controller and global scheduler are
verified only through the two top-level tests.

## Simulating

All files are plain SystemVerilog (IEEE 1800-2017). `rtl/hihgnn_pkg.sv` must come first.
For example, the end-to-end test at default sizes:

```
verilator --binary --top-module tb_hihgnn_top_full rtl/hihgnn_pkg.sv \
    $(ls rtl/*.sv | grep -v hihgnn_pkg) tb/hbm_model.sv tb/tb_hihgnn_top_full.sv
./obj_dir/Vtb_hihgnn_top_full
```

Unit tests need only the package, the block, its sub-blocks and the testbench. Every testbench
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.

**Largest simulated size.** The full default configuration was simulated end to end:

- hidden size 64;
- 96 systolic arrays;
- 4 lanes of 8 SIMD cores;
- the full FP-Buf, NA-Buf and SF-Buf capacities.

It ran on the small test graph: 11 vertices and 3 semantic graphs, about 6400 cycles. No graph
of dataset size has been simulated.

To change the design, edit the parameters of `hihgnn_top`:

- `HID`: hidden size, a multiple of 8;
- `ARRAYS`: the number of systolic arrays;
- `LANES`;
- the buffer depths;
- the allocation threshold, which is a run-time port.

`tb_hihgnn_top` shows a consistent small set.

## Where this design differs from, or goes beyond, the publication

- **HAN only.** R-GCN, R-GAT and Simple-HGN, also evaluated in the publication, are not built.
- **Workloads.** None of the publication's datasets fits at the default sizes. The SF-Buf holds
  491 vectors, but HAN on IMDB, ACM and DBLP has 4932, 3025 and 4057 target vertices. The
  publication does not say how the GSF stage handles more targets than the SF-Buf holds. All
  other limits fit: vertex indices, raw feature widths (up to 4231 words = 45 slices), NA-Buf
  entries and edge counts.
- **One semantic graph at a time.** The publication runs one semantic graph per lane
  concurrently. Here the front end walks one graph at a time, one edge at a time. The lanes
  share that graph's work through the threshold/OW mechanism; every graph still has its own
  home lane. Front-end throughput is therefore about one edge per 10–20 cycles, far below the
  publication's.
- **Shared compute.** One shared Systolic Module (as drawn in Fig. 9(a)) instead of 96 arrays
  per lane (as stated under Table 5). Each lane has 8 SIMD cores (64 lanes of work) instead
  of 128.
- **RAB placement.** The RAB sits with the global scheduler. The text places it in the local
  scheduler.
- **Att-Buf contents.** The Att-Buf holds only the theta pair per vertex, 128 KB of the stated
  0.38 MB. The attention vectors and LSF weights live in systolic weight registers, and b and q
  in registers. The publication's Fig. 7 draws them as read from the Att-Buf.
- **Edge format.** Edges are stored as a target-sorted list of {src, dst} words, not in CSC
  format.
- **Not built:**
  - similarity-aware execution scheduling, which is a host-side ordering of semantic graphs
    by a hypergraph Hamilton path;
  - building semantic graphs from metapaths;
  - HBM itself. The top exposes a line-wide request/response port.
- **Fixed point.** Softmax without max subtraction can overflow for large attention scores;
  exp saturates at 32767.
