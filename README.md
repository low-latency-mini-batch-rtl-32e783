# A two-mode GNN inference accelerator for decoupled models

Graph neural networks normally compute a vertex's embedding by repeatedly
aggregating over its neighbourhood. With L layers, the set of vertices that
contributes grows roughly exponentially with L. A *decoupled* GNN breaks that
link. For each target vertex, a host first picks a small set of N important
neighbours, for example with personalised PageRank. It then runs all L layers
only on the subgraph those N vertices induce. Every target therefore brings a
small, fixed-size working set (N ≤ 256 vertices here). Its features and edges fit
entirely on chip, and the work per target is about N·L·f² multiply-adds for
hidden size f.

This RTL is the FPGA side of such a system. It has several independent
**Processing Elements (PEs)**. Each PE takes one target's subgraph at a time
and returns that target's embedding, while the next subgraph is loaded into a
spare buffer. Every PE holds one array of ALUs, the **Adaptive Computation
Kernel (ACK)**, which runs in one of two modes:

* **Systolic mode** computes the dense products of *feature transformation*
  (FT, `H_out = act(H_in · W)`).
* **Scatter-gather mode** computes the sparse *feature aggregation* (FA,
  `z_v = Σ_{u→v} w_uv · h_u`, or max/min) and the final *readout* (max over the
  subgraph's vertices).

A model is a list of kernels, such as FA, FT, FA, FT, …, READOUT. The PE runs
the list one kernel at a time and switches the ACK's mode between kernels.

The design follows the accelerator described in *Low-latency Mini-batch GNN
Inference on CPU-FPGA Heterogeneous Platform* (Zhang, Zeng, Prasanna). The
default sizes are those of its Alveo U250 design point. The block structure
and the two-mode ACK are the paper's. Data formats, handshakes, the systolic
dataflow and every size the paper leaves open are this design's own choices;
they are listed below.

## Sizes

| parameter | default | meaning | origin |
|---|---|---|---|
| `N_PE` | 8 | PEs | paper (8 PEs, 2 per SLR × 4 SLRs) |
| `P_SYS` | 16 | ACK is `P_SYS × P_SYS` ALUs | paper's sizing formula, see below |
| `P_SG` | 8 | scatter units = gather units = banks | paper: `p_sg = p_sys/2` |
| `MAX_V` | 256 | vertices per subgraph (target included) | largest N evaluated |
| `VPB` | 32 | vertices per bank (`MAX_V/P_SG`) | derived |
| `CH_MAX` | 38 | feature chunks of 16 per vertex (608 values) | own: ≥ 602 input features of Reddit |
| `FOUT_CH` | 16 | output chunks per FT (256 outputs) | own: hidden size 256 |
| `EDGE_DEPTH` | 8192 | edges per edge bank | own: 8 × 8192 ≥ all edges of a 256-vertex clique |
| `KT_DEPTH` | 64 | kernel-table entries | own: 2L+1 kernels for L = 16 fit |

`gnn_pkg` contains the paper's two sizing rules as functions:
`p_sys = 2^⌊log2 √(N_DSP/N_ALU)⌋` and `N_pe = ⌊(N_DSP/N_ALU)/p_sys²⌋`. With
3072 DSPs per U250 SLR and 5 DSPs per ALU (a Float32 multiply-add), they give
`p_sys = 16` and 2 PEs per SLR. The top's defaults `DEF_P_SYS` and `DEF_N_PE`
are computed this way.

**Number format.** The paper's ALUs are Float32. Here every datum is 32-bit
**Q16.16 fixed point**. A multiply takes the 64-bit product and shifts it right
arithmetically by 16, i.e. it truncates towards −∞. Adds wrap around. This keeps
the ALU plain integer logic and makes results bit-exactly predictable. It is the
largest departure from the paper's arithmetic.

## Processing Element

```
            ld_* (features, edges of the next target)        w_* (weights)
                     |                                           |
       +-------------v-------------+                   +---------v--------+
       | Feature/Result Buffer x3  |  Edge Buffer x3   | Weight Buffer x2 |
       |   8 banks each            |  8 banks each     |  (double)        |
       +---+-------------------^---+--------+----------+---------+--------+
           | src rows          | dst rows   | edges              | W rows
       +---v-------------------+------------v--------------------v--------+
       |                 ACK  (16 x 16 ALUs, mode register)               |
       |  systolic: W stationary, vertices stream west->east, sums south   |
       |  scatter-gather: 8 scatter units -> butterfly -> 8 RAW -> 8 gather|
       +-----------------------------+------------------------------------+
                                     | FT results
                              Activation Unit  (ReLU / LeakyReLU)
                                     |
                          back into the destination buffer
```

### Buffers and their roles

Each PE has three Feature/Result buffers and three Edge buffers. At any time,
one of each is **A**, one is **B**, and one is the **prefetch** buffer. The
host writes the next target's vertex features and edges into the prefetch
buffers through `ld_*`. It then hands them over with `commit_en`, passing the
target's tag, its vertex count and the edge count of each bank. When the PE
finishes a target, it rotates the roles: prefetch → A, A → B, B → prefetch. It
then starts the kernel table again at entry 0. Each kernel names its source
and destination as A or B, so a model alternates between them layer by layer.
`pf_free` tells the host that the PE can take another target. Loading one
target therefore overlaps computing the previous one.

The Weight Buffer has two halves. The loader fills a half and commits it, which
sets `w_full[h]`. An FT kernel waits until its half is full; this is the
*weight wait* event. An FT kernel with `wrelease` set frees its half when it
ends, so the next layer's matrix can be loaded into that half while the other
half is in use.

### Memory layout

A feature buffer has `P_SG` banks. Each bank word holds 16 values (one
*chunk*), so a bank delivers 16 data per cycle. Vertex `v` lives in bank
`v / VPB`, local row `v % VPB`. Chunk `c` of vertex `v` is at bank address
`row·CH_MAX + c`. Edges `⟨src, dst, weight⟩` are stored in the edge bank of
their **source** vertex. Scatter unit `u` therefore reads features only from
bank `u`, and the banks never conflict on the read side. The host sorts the
edges this way when it loads them. All RAMs (`sram_1r1w`) have one write port
and one registered read port, with one cycle of read latency. A read of an
address being written in the same cycle returns the old value.

### The kernel table

`kernel_t` (in `gnn_pkg`) has these fields:

* `kind`: FA, FT or READOUT.
* `src_b` / `dst_b`: the source and destination buffers, A or B.
* `agg`: sum, max or min.
* `act`: none, ReLU or LeakyReLU.
* `whalf` / `wrelease`: the weight half to use, and whether to free it at the
  end.
* `in_ch` / `out_ch`: feature chunks in and out.
* `last`: marks the final kernel.

The table is written through `kt_*` and is shared by all PEs. After the last
kernel, the PE sends row 0 (the target) of buffer `out_b`, `out_ch` chunks
long, on the `emb_*` valid/ready stream.

Every kernel starts with one cycle that loads the ACK's mode register; this is
the *mode switch*. FA and READOUT then write the aggregation's identity (0 for
sum, the most negative value for max, the most positive for min) into the
destination rows. After that they start the scatter-gather pass. READOUT is a
scatter-gather *sweep*: each scatter unit walks all rows of its bank with
weight 1 towards destination row 0.

## ACK, systolic mode

The systolic array is **weight stationary**:

1. **Load.** For `P_SYS` cycles the ALUs run `LOADW`. One row of the
   16 × 16 weight tile enters from the north per cycle and shifts down, so that
   after 16 cycles ALU (r, c) holds `W[k0+r][j0+c]`.
2. **Stream.** For each vertex, one per cycle, the west edge receives 16
   consecutive input features of the vertex. The north edge receives the
   vertex's 16 running partial sums, which are read back from the destination
   buffer. Both inputs are skewed inside the ACK. Activations travel east and
   partial sums travel south. The bottom row is de-skewed, so `sys_out` is
   `north + Wᵀ·west` for that vertex.
3. **Timing.** Each result appears exactly `2·P_SYS − 1` cycles after its
   input, with the vertex's tag. At full rate one vertex enters per cycle,
   giving 256 multiply-accumulates per cycle.

An FT kernel tiles `H·W` into blocks of 16 output chunks × 16 input chunks.
For each output chunk `jc` and input chunk `kc`, the tile costs three phases:

* weight load: `P_SYS` cycles;
* streaming: `nv` cycles, where `nv` is the number of vertices;
* drain: `2·P_SYS + 2` cycles.

The first input chunk starts the partial sums at 0. The activation is applied
only after the last input chunk. For N = 256 and f = 256, one FT layer costs
16 × 16 × (16 + 256 + 34) ≈ 78 k cycles. The weight reload and the drain are
not overlapped with streaming; this is a simplicity choice, not something the
paper describes.

## ACK, scatter-gather mode

The same 256 ALUs become 8 scatter units and 8 gather units of 16 ALUs each.
Scatter unit `u` uses the left half of rows `2u` and `2u+1`; gather unit `g`
uses the right half of the same rows. The ALUs' operand multiplexers switch
on the mode register.

* **Scatter unit.** Walks its bank's edge list, one (edge, chunk) pair per
  cycle. For each pair it reads the source chunk and multiplies it by the edge
  weight on its 16 ALUs. The result goes out as an *update*
  `⟨dst, chunk, 16 values⟩`. A 4-entry queue at the output absorbs
  back-pressure, and credit counting keeps it from overflowing.
* **Routing network.** A butterfly of `log2 8 = 3` stages of 2 × 2 switches
  sends each update to the gather unit that owns `dst`, i.e. port `dst / VPB`.
  It is combinational and lossless. When two packets in a switch want the same
  side, one proceeds and the other waits at its input. The winner alternates
  every cycle. `sg_conflict` reports such a hold.
* **RAW unit.** A gather unit reads the old value of a destination chunk,
  combines it with the update, and writes the result two cycles later. A second
  update to the same chunk inside that window would read a stale value. The
  RAW unit compares each incoming address with the gather unit's two in-flight
  addresses and holds the update while they match; this is the *RAW stall*.
  It does not forward.
* **Gather unit.** A three-stage pipeline: read the old chunk, apply
  `aggregate()` (sum, max or min) on 16 ALUs, then write the result back. Each
  gather unit owns one destination bank.

`sg_done` rises when every scatter unit has finished its list and emptied its
queue, and every gather pipeline is empty.

## Activation unit

A registered stage of one cycle between the systolic array's output and the
destination buffer. It applies ReLU or LeakyReLU with slope 0.2 (13107 in
Q16.16), or passes values through. Softmax, which the attention kernel of GAT
needs, is not implemented.

## Top level

`gnn_accel_top` instantiates `N_PE` PEs. The host-side traffic appears as
ports:

* `ld_*` and `commit_*`: select a PE with `ld_pe` / `commit_pe`.
* `kt_*`: the kernel table, broadcast to all PEs.
* `w_*`: one weight port per PE.
* `emb_*`: embeddings returning to the host. A round-robin arbiter picks a PE
  with a result ready and keeps the grant until that embedding's last chunk is
  accepted, so an embedding's chunks are never interleaved with another's.
  `emb_pe` and `emb_tag` identify the result.

Each PE also has pulse outputs: `ev_mode_switch`, `ev_raw_stall`,
`ev_conflict`, `ev_weight_wait` and `ev_kernel_done`. Tests use them to see
the mechanisms happen.

Outside the RTL are the host processor (neighbour selection, subgraph
building, task allocation), the PCIe/DMA engine, the FPGA's DDR and the vendor
shell. The testbenches play the host: they build random subgraphs, load them
and check the embeddings.

## Departures and limits

* Arithmetic is Q16.16 fixed point, not Float32.
* Attention (GAT) is not built. The systolic part of attention could reuse FT,
  but Softmax is missing. GraphSAGE's self-plus-neighbour form is also not
  built: the PE computes `act(z·W)` only.
* The routing network's inner structure, the RAW unit's stall policy, the
  edge partitioning by source bank, the buffer hand-over handshake, the kernel
  table, the systolic dataflow and all latencies are this design's own.
* FT does not overlap weight loading or pipeline drain with streaming.

## Files

| file | content |
|---|---|
| `rtl/gnn_pkg.sv` | types (`data_t`, `edge_t`, `kernel_t`, enums), Q16.16 helpers, sizing functions |
| `rtl/alu.sv` | one ALU: LOADW/MAC/MUL/ADD/MAX/MIN/PASS |
| `rtl/scatter_unit.sv`, `rtl/gather_unit.sv`, `rtl/raw_unit.sv`, `rtl/routing_network.sv` | scatter-gather datapath |
| `rtl/ack.sv` | the two-mode array |
| `rtl/feature_buffer.sv`, `rtl/edge_buffer.sv`, `rtl/weight_buffer.sv`, `rtl/sram_1r1w.sv` | buffers |
| `rtl/activation_unit.sv` | ReLU / LeakyReLU |
| `rtl/sync_fifo.sv` | small first-word-fall-through FIFO |
| `rtl/pe.sv` | processing element and its controller |
| `rtl/gnn_accel_top.sv` | top |
| `tb/<block>_tb.sv` | one self-checking bench per block |
| `tb/gnn_ref_pkg.sv` | reference model: random subgraph, bit-exact FA → FT(ReLU) → max readout |
| `tb/gnn_top_bench_body.svh` | shared body of the two top benches |
| `tb/gnn_accel_top_tb.sv` | top with 2 small PEs, 6 targets |
| `tb/gnn_accel_top_full_tb.sv` | top at its default sizes (8 PEs, 16 × 16), 3 targets |
| `tb/gcn_workload_tb.sv` | default-size top running a 3-layer GCN, N = 64, f = 256, bit-exact |

## Simulating

Each bench prints `TB_RESULT checks=N failures=M` and stops. A watchdog ends
it with a failure if it hangs. Example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/gnn_pkg.sv tb/gnn_ref_pkg.sv $(ls rtl/*.sv | grep -v gnn_pkg) \
    tb/gnn_accel_top_tb.sv --top-module gnn_accel_top_tb -o tb
./obj_dir/tb
```

Unit benches need only the package and the block's own files, e.g.
`rtl/gnn_pkg.sv rtl/alu.sv rtl/sync_fifo.sv rtl/scatter_unit.sv tb/scatter_unit_tb.sv`.

What the benches check:

* **alu, activation_unit, raw_unit**: every operation or case against an
  integer model.
* **routing_network**: 2400 random packets under random back-pressure; each
  arrives once, on the right port, in order; conflicts occur.
* **scatter_unit / gather_unit**: the update stream and the read-modify-write
  results against models, with hazards and back-pressure.
* **ack**: systolic results bit-exact with a `2·P_SYS − 1` latency check, and
  scatter-gather sum and max over random edge lists, checked against a
  reference of the destination banks.
* **buffers**: reads against shadow memories while roles rotate.
* **pe_tb**: two targets back to back, with late weights and a stalled output;
  embeddings compared bit-exactly with the reference.
* **top benches**: count every mechanism (mode switch, RAW stall, routing
  conflict, weight wait, load/compute overlap, output contention). They fail
  if any of these never happens.

The full-size bench compiles in about a minute and a half and simulates 3
targets of 24–40 vertices with 32 features in under a second. It exercises two
of the eight PEs. `gcn_workload_tb` runs one target of an evaluated workload
(L = 3 layers, N = 64 vertices, f = 256) at the default sizes. That is
7 kernels and three 256 × 256 weight matrices, the third reloaded into the
half freed by the first. It takes 98,734 cycles, about 329 µs at 300 MHz,
and the embedding matches the reference exactly.
