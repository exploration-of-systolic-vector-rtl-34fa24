# HSV: a heterogeneous systolic-vector accelerator for mixed ML inference

Datacenter inference traffic mixes convolutional networks with transformers. Matrix
multiplication dominates the first. The second spends a large share of its time in
vector work: softmax, activations, pooling and element-wise operations. An accelerator
built only from systolic arrays leaves that share to slow or idle hardware.

This design pairs systolic arrays with SIMD vector processors inside *clusters*. A
hardware scheduler places every piece of work on whichever processor will finish it with
the least wasted time. A vector processor may also take a matrix multiplication when the
arrays are busy. In front of the clusters, a load balancer receives requests from many
users in a self-describing packet format and spreads them over the clusters.

The RTL is SystemVerilog-2017 and synthesizable. Every block has a self-checking testbench
for plain `verilator`.

## Organisation

```
host flits ─► load_balancer ─┬─► sv_cluster 0 ─┐
 (UMF)        umf_decoder    ├─► sv_cluster 1  │  each cluster:
              request table  ├─► sv_cluster 2  │   model_info_buffer ─► task expander ─► task_queue x NQ
              status table   └─► sv_cluster 3  │   has_scheduler ─► systolic_array x NSA (pe grid)
              request queue                    │                 └► vector_processor x NVP
                                               │                     (vp_ucode_gen + vector_lane x LANES)
                                               └─  shared_memory (banked crossbar) ◄─ ext_req/ext_rsp
```

Default configuration (`hsv_top` with no overrides):
- 4 clusters;
- per cluster: four 64×64 systolic arrays, eight 64-lane vector processors and 40 MB of
  shared memory;
- 4 task queues per cluster and 16 request-table entries;
- up to 16 models of up to 64 layers each.

At 800 MHz this is 4 × 4 × 4096 MACs per cycle for the arrays, as the sizing is meant to
provide.

## Request flow

1. **Model load.** The host sends a *model-load* frame. Each information packet carries
   one layer: operation, M, K, N and three byte addresses. These packets become layer
   descriptors, written into the model information buffer of every cluster. Data packets
   (the parameters) leave on `data_*`. The parameters themselves reach the shared memory
   through `ext_req/ext_rsp`. At the end of the frame the model is marked loaded and a
   `loaded` response is returned.
2. **Check.** A *check-ack* frame asks whether a model is loaded. The answer is a `check`
   response with `ok` set accordingly.
3. **Request.**
   - A *request-return* frame's user ID, transaction ID and model ID go into a free
     request-table entry, and the entry's index goes into the request queue.
   - The queue head goes to the ready cluster with the fewest requests in flight.
   - A request for a model that is not loaded is refused at once (`ok = 0`).
   - When the table is full, `in_ready` drops.
4. **In the cluster.**
   - The request takes a free task queue.
   - The task expander reads the model's layers one by one. It cuts each layer into
     sub-layer tasks of at most 64 output columns and pushes them into the queue. The last
     task is marked.
   - The scheduler hands tasks to processors. When the marked task finishes, the cluster
     raises `done_v` with the transaction ID.
5. **Return.** The load balancer frees the table entry and sends a `return` response with
   the user and transaction IDs.

### UMF frame format (32-bit flits)

| part | flits |
|---|---|
| frame header | length high, length low, `{type[31:24], version[23:16], reserved[15:12], model[11:0]}`, user ID, transaction ID |
| info message header | length high, length low, `{reserved, #packets[15:0]}` |
| info packet | `{next len[31:16], cur len[15:0]}`, `{op[31:24], out type, in type, attr type, layer[11:0]}`, *cur len* payload flits |
| data message header | like the info message header |
| data packet | length high, payload length low, `{dtype[31:24], precision[23:16], shape[15:14], rsvd, tensor[11:0]}`, *shape* dimension flits, payload |

Packet types:

| code | type | carries |
|---|---|---|
| 1 | model load | info and data messages |
| 2 | request-return | data message only |
| 3 | check-ack | header only |

The first five info payload flits hold the layer descriptor:
`{M,K}`, `{0,N}`, the byte address of A, of B/W and of C.

Layer operations (`op_e` in `hsv_pkg`):

| op | meaning |
|---|---|
| GEMM | int8 A[M×K] · W[K×N] → int32 C; W and C have row pitch N |
| ADD | A + B, 32-bit words |
| RELU | max(A, 0) |
| MAXPOOL | maximum over the M rows of each column |
| LUT | piecewise-linear activation from a 16-segment (w, b) table at B |
| EXP | exponential, Q16.16 |
| RECIP | reciprocal, Q16.16 |
| SOFTMAX | softmax over the M rows of each column, Q16.16 |

## Heterogeneity-aware scheduling (`has_scheduler`)

This is the heart of the design.

**Scheduling table.** For every processor the scheduler keeps:
- `t_free`: the estimated end of the work already given to it;
- a one-entry pending slot;
- the queue whose task is running.

**Candidates.** Each cycle, every task queue whose previous task has finished offers its
head task. Tasks of one request run in order.

**Per processor.** For each candidate and each processor *p* that can run it:

```
t_start = max(now, t_free[p])
t_end   = t_start + t_comp(task, p)
```

- Arrays accept only GEMM; vector processors accept everything.
- `t_comp` comes from cycle formulas that match this design's controllers
  (`est_sa_cycles`, `est_vp_cycles` in `hsv_pkg`).

**Nomination.** The processor with the smallest `t_end` is nominated. The candidate's idle
time is `t_start - t_free[p]`: the gap it would leave on that processor.

**Selection.** The candidate with the smallest idle time wins. Ties go round-robin, after
the queue selected last.

**Update.** The winner goes into the processor's pending slot, `t_free[p] ← t_end`, and
the queue pops. An idle processor starts its pending task on the next cycle. When a
processor finishes with nothing pending, `t_free` is corrected to the actual time.

**Array work on vector processors.** Because arrays are restricted and vector processors
are not, a GEMM lands on a vector processor whenever that ends sooner. The `a2v` output
marks each such decision.

**Memory ready time.** The memory term of the start time is the current time. Parameters
are assumed to be in the shared memory already. Scheduling of external-memory transfers is
not part of this RTL.

## Systolic array (`systolic_array`, `pe`)

The array is weight-stationary.
- PE (r, c) holds W[k0+r][c] for the current K chunk of `ROWS` rows.
- A rows enter from the left, skewed by one cycle per array row.
- Partial sums flow down. Column *c*'s result for A row *i* leaves the bottom at cycle
  `i + ROWS + c`.

Each PE has two weight registers. The next chunk's weights shift in from the top during
the first `ROWS` cycles of the current chunk; a swap makes them active. The *accumulation
units* write the first chunk into the output buffer and add later chunks to it.

A task runs in phases: load W, load A, preload, compute (`m + ROWS + COLS + 1` cycles per
chunk), store C as 32-bit words. The phases do not overlap.

Buffers per array row/column are 2 KB for input and weight and 4 KB for output.

## Vector processor (`vector_processor`, `vp_ucode_gen`, `vector_lane`)

Lane *j* works on column *j* of the tile.

**Microcode generator.** `vp_ucode_gen` turns a task into lane instructions; no program is
fetched. For example, a GEMM row runs `MOVI r2,0`, then for each kk
`LD r1,kk; MAC r2 += r1·A[i][kk]`, then `ST r2,i`. The A element is broadcast to all
lanes from a shared buffer.

**Lane controller.** It issues one instruction per cycle and holds the generator (`stall`)
while the multi-cycle special function unit is busy. The hold applies when the next
instruction needs the SFU, or needs the register the SFU will write.

**Lanes.** Each lane has:
- a 16-entry scratchpad;
- a two-stage pipeline with forwarding;
- a MAC with saturation and a programmable shift;
- an ALU (add, max);
- a 16-segment LUT unit: segment = ⌊x⌋ + 8, clamped, result `w·x + b`;
- an SFU: exp is 17 cycles, using 2^(x·log2 e) with shift-and-multiply by the constants
  2^(2^-j); reciprocal is 34 cycles of restoring division.

Softmax is computed as exp, a running sum, one reciprocal, then multiply. It does not
subtract the maximum, so inputs should stay below about 10 in Q16.16.

## Shared memory (`shared_memory`)

- `NBANKS` word-interleaved banks; bank = address bits [5:2] by default.
- A full crossbar connects every processor port and the external port.
- Each bank has a round-robin arbiter; ports that hit different banks proceed in parallel.
- Writes use byte enables. Reads return one cycle after the grant.
- `sm_conflict` flags a cycle in which some request lost arbitration.

Multi-word transfers issue one word per grant, so a conflicting processor simply waits.

## Interfaces and timing conventions

- Memory port (`mem_req_t`/`mem_rsp_t`): `req` is held until `gnt`. Read data comes with
  `rvalid` in the cycle after the grant.
- Task start: `start` pulses with `tsk` while `busy` is low. `done` pulses once at the end.
- Load balancer to cluster: `req_v/req_ready`. Cluster to load balancer: `done_v/done_ack`.
  Completions waiting at several clusters are taken one per cycle.
- Host responses are single-cycle `rsp_v` pulses. `rsp_kind`: 1 loaded, 2 check, 3 return.

## Departures from the described architecture

- The load balancer's controller and the cluster scheduler are fixed-function logic, not
  programs on RISC-V cores. Allocation is least-loaded among ready clusters.
- External-memory access scheduling is not built. There are no HBM controllers, HBM,
  interconnect, PCIe or host. Each cluster's shared memory exposes a port where they
  would attach.
- The array buffers are not double-buffered for overlap with memory transfers. Only the
  PE weight registers are.
- Convolution must arrive as GEMM (im2col by whoever builds the layer list). There is no
  direct 3-D convolution mode.
- Layers are split along output columns only, by processor width. Shared-memory capacity
  is not considered.
- Number formats (int8 GEMM inputs, int32 results, Q16.16 for nonlinear functions), bit
  widths and encodings are this design's own.

## Verification

Every block has a testbench in `tb/` that compares against values computed independently.
Each prints `TB_RESULT checks=… failures=…` and has a watchdog. Example:

```
verilator --binary --timing --assert -Wno-fatal rtl/hsv_pkg.sv rtl/*.sv tb/tb_mem.sv \
    tb/tb_vector_processor.sv --top-module tb_vector_processor -Mdir obj && obj/Vtb_vector_processor
```

| testbench | what it shows |
|---|---|
| `tb_pe`, `tb_systolic_array` | GEMMs on a 4×4 array, including K over several chunks and pitch > N |
| `tb_vector_lane` | every lane operation, with forwarding |
| `tb_vp_ucode_gen` | instruction streams of all operations under random stalls |
| `tb_vector_processor` | all eight operations on random data; exp/softmax against real arithmetic; stalls observed |
| `tb_shared_memory` | data integrity, one grant per bank, no starvation, conflict flag |
| `tb_task_queue`, `tb_model_info_buffer` | against reference models |
| `tb_has_scheduler` | each decision recomputed from the scheduling table; ordering; array ops on vector processors |
| `tb_umf_decoder`, `tb_load_balancer` | random frames of all types; dispatch order and least-loaded choice; responses |
| `tb_sv_cluster` | two models, four requests, GEMM+RELU and GEMM+SOFTMAX results checked |
| `tb_hsv_top` | reduced top (2 clusters, 4×4 arrays, 4 lanes), all paths end to end; counts each mechanism and fails if one never occurred |

`tb_mem.sv` is a behavioural memory with random grant delays, used by the processor tests.

**Full-size simulation.** No testbench runs the top at its default size. Verilator turns
the default configuration into more than 200 large C++ files: 16 arrays of 4096 PEs, 32
vector processors of 64 lanes and four 40 MB memories. Compiling them takes far longer than
a test run is allowed. The largest configurations simulated are:
- the reduced top in `tb_hsv_top`: two clusters, each with a 4×4 array, two 4-lane vector
  processors and 64 kB of shared memory;
- the cluster in `tb_sv_cluster`.

All sizes are parameters. Array, lane and bank counts have no structural limit beyond
these defaults.

**Synthesis size.** Coarse synthesis of one 64×64 array, or of the whole top, takes longer
than ten minutes. Its size is dominated by the PE grid and, for the top, by the 4 × 40 MB
memories, which stay memory cells.
