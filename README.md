# ANNS-AMP: a mixed-precision accelerator for cluster-based vector search

Approximate nearest-neighbour search over an IVF-PQ index does most of its
work computing distances to vectors that will not make it into the result.
There are two such stages. The first compares a query with every cluster
centroid to find the `nprobe` closest clusters. The second builds a distance
look-up table for the query's residual against the product-quantisation
codebook. Most of these distances only have to be good enough to rank things
that are clearly far away. This design computes them **bit-serially, at a
precision chosen per sub-space**. A sub-space that a small on-chip predictor
considers unimportant is streamed with 4 or 6 of its 8 bits. It then costs
proportionally fewer cycles and fewer bits fetched from memory. Sub-spaces
that matter keep all 8 bits.

This RTL implements that accelerator in SystemVerilog-2017: the datapath, the
schedulers, the buffers and the memory-side plumbing, with a top level that
ties them into one search pipeline.

## 1. The search, as the hardware sees it

A query goes through four stages, then a top-k selection:

| stage | operands | work on chip | result goes to |
|---|---|---|---|
| CL, cluster locating | query, centroids (uint8) | squared L2 per centroid, mixed precision | DRM adder tree, then top-`nprobe` queue |
| RC, residual calculation | query, chosen centroid | exact subtraction, 8 bits | residual register of the query slot |
| LC, LUT construction | residual, codebook entries (int8) | squared L2 per (subspace, entry), mixed precision | distance LUT of the query slot |
| DC, distance calculation | PQ codes from the cluster buffer | M table look-ups and one sum per vector | DRM adder tree, then top-k queue |

A **query slot** is one of `G_DRM = 4` queries in flight. Slot *q* owns:
- LUT *q*;
- the DRM units and top-k queues `q*NG/G_DRM .. (q+1)*NG/G_DRM-1`;
- a query register;
- a residual register.

Between CL and DC, the **task reorder** unit turns the list of (query →
clusters) into a list of (cluster → queries). Each cluster is then read from
memory once for all the queries that probe it.

## 2. Bit-serial arithmetic at variable precision (`dcm_pe`)

Every distance lane is one `dcm_pe`. It receives one bit of the query operand
and one bit of the stored operand per cycle, MSB first. For precision *P* it
receives only the top *P* bits. Three bit-serial stages follow each other.

**Subtractor.** The difference is built one digit at a time: `s = 2*s + (q_bit - c_bit)`. In signed mode the first (sign) digit is negated, as two's complement requires. After *P* cycles `s` holds `(q >> sh) - (c >> sh)`, where `sh = 8 - P`. For signed operands these are arithmetic shifts.

**Multiplier.** The difference is latched as a magnitude and squared by shift-and-add, one partial product per cycle. Each partial product is also shifted left by `2*sh`. That way a reduced-precision result is on the same scale as a full-precision one, and results of different precisions can be added and compared directly.

**Accumulator.** Adds the square of each dimension. It restarts on the first dimension of a vector and reports `pdist` after the last one.

The subtractor and the multiplier overlap, so they form a pipeline. A vector
of `nd` dimensions at precision *P* finishes `nd*P + P` cycles after its first
bit. In RC mode the multiplier is skipped. The exact difference leaves one
cycle after its last bit, together with its dimension index.

The precision can differ from lane to lane. A DCM group (`dcm_group`, 32
lanes) collects `pdist` from every active lane and then offers one result
carrying the tag of the task. Tasks with low precision finish sooner, and
the group takes its next task as soon as the last lane is done.

## 3. Bit-plane data layout and fetching (`dfm`)

In memory, a vector is stored by **bit planes**, not by bytes. For slice *s*
of a vector, plane *p* is one word holding bit `7-p` of each of the slice's
dimensions. It sits at `base + (s*8 + p) * stride`. A fetch at precision *P*
reads planes `0..P-1` and never touches the rest, so the memory traffic
shrinks with the precision.

The data fetching module of each group has two halves used in ping-pong. While one half
streams bits into the group, the other is filled with the next task's planes.
Fetching skips inactive slices and the planes above each slice's precision.
A half starts streaming as soon as it is full and the group is idle. The
streaming side sends, per lane and dimension, planes `0..P-1` of the stored
operand, together with the matching query bits. The query bits come from the
slot's query register (CL, RC) or residual register (LC).

Each group reads through the memory controller of pseudo channel `g mod 32`
(`mem_ctrl`). That controller does round-robin arbitration among its groups
and keeps a FIFO of requester IDs, so in-order responses go back to whoever
asked.

## 4. Choosing the precision (`ppm`)

The precision predictor is an RBF-kernel support vector regressor:

    y = sum_i alpha_i * exp(-gamma * |f - sv_i|^2) + b

- Up to 1280 support vectors are evaluated, one per cycle.
- `exp` comes from a 256-entry table indexed by the squared distance shifted right by `gamma_sh`. So gamma is a power of two, and the table holds `exp(-x)` sampled at the matching step.
- Each support vector and each alpha is loaded by the host, as is each table entry.
- The fixed-point output `y` (Q8.8, in bits) is rounded up to the next of 4, 6 or 8 bits.
- A prediction takes `n_sv + 5` cycles.

At the top level, each prediction is written into a **precision table**
`ptab[slice][sub-space]`. Its reset value is 8 bits, so any sub-space that
was never predicted runs at full precision. A CL or LC task names a sub-space
per slice, and the table supplies that slice's precision. RC tasks always use
8 bits.

Training the regressor is not in hardware. Neither is the split of the
vector space into sub-spaces, nor the extraction of features and labels.
These run offline and only produce the values loaded above.

## 5. Spreading the work (`lsm`)

Tasks differ in cost. The load scheduler estimates the cost of each task as
`vectors × dims × max precision`. It sends each task to the group with the
smallest outstanding estimate, among groups whose queue has room. Each group
has a queue of `QD = 2` tasks.

When a group's queue is empty, it **takes work from its neighbour** `g+1`:
- It takes the entry the neighbour is not about to start.
- It counts each such offload in `offloads`.

A task's estimate is removed from its group's load when the task starts
streaming.

## 6. Reduction, pruning and top-k (`drm_unit`, `tsm_pq`, `crossbar`, `dist_lut`)

**DRM unit.** A 32-input pipelined adder tree with five register levels. It adds the slice partial distances of one vector. When a vector was not split, the *bypass* path delivers it in one cycle instead.

**TSM queue.** A systolic sorted queue of depth 128 (`nprobe` ≤ 128). Every cell compares its key with the incoming key, and the queue shifts to make room in one cycle. The key at position `k-1` is the current threshold. A DRM result that is not below it is **pruned**, meaning it is never inserted.

**Distance LUT.** Each slot's LUT has one bank per subspace (16 × 256 entries). In DC one code vector reads all 16 banks in one cycle.

**Crossbar.** A registered crossbar routes the 16 LUT values onto the inputs of the DRM unit chosen, round robin, within the slot's DRM group.

**LC results.** They go straight into the LUT, one entry per cycle, bypassing the adder tree.

## 7. Top level (`anns_amp_top`)

Every block is instantiated at its full size. The defaults are:
- 1024 groups of 32 lanes, so 32 768 bit-serial PEs;
- 1024 DRM units and 1024 queues;
- 4 query slots and LUTs;
- 32 memory pseudo channels.

Two buffers are built from `sram_sp`:
- The 1 MB **cluster buffer** holds 65 536 words of 16 codes × 8 bits.
- The 256 KB **query buffer** holds 256 queries of 1024 dims.

All host-facing interfaces are plain valid/ready or strobe ports. They are
listed in the header of `rtl/anns_amp_top.sv`. The memory side is `NCH`
independent request/response channels.

One search runs in this order:
1. Load the query into a slot.
2. Load the predictor and run predictions into the precision table.
3. Clear the queues, set `k_sel = nprobe` and issue one CL task per centroid.
4. Read the queues, which together hold the top `nprobe` clusters. Push them
   into the task reorder unit.
5. Issue one RC task to form the residual.
6. Issue one LC task per codebook entry.
7. Raise `dc_phase`, write codes into the cluster buffer and issue one DC
   request per encoded vector.
8. Read the top-k from the slot's queues.

Counters report offloads, pruned results, bypasses, LUT writes, residuals
written and tasks that ran below full precision.

## 8. Where this design makes its own choices

The following are not specified in enough detail to copy and were chosen here:

- **Interfaces.** All command and data interfaces are this design's own, as are the precision table and its indexing, and the task format (base address, stride, dims per slice, slice mask, one sub-space per slice).
- **Bit-serial encodings.** The signed-digit recurrence in the subtractor and the `2*sh` rescaling are choices.
- **Predictor arithmetic.** The Q8.8 fixed point, the power-of-two gamma, the exp table and the 4/6/8 rounding steps are choices.
- **Mapping to memory and DRM units.**
  - Group *g* uses pseudo channel `g mod 32`.
  - Each DCM group has its own DRM unit and top-k queue.
  - DC vectors go to the slot's DRM units round robin.
- **Sharing between queries.** The load scheduler may put a CL task of any slot on any group. Run CL for one query at a time between queue clears.
- **Phase and task rules.**
  - DC and CL do not overlap (`dc_phase`).
  - Only one RC task may be in flight.
  - Residuals are saturated to int8.
  - LUT entries are 32-bit.
- **Task reorder.** It keeps per-cluster linked lists plus a list of clusters in order of first use. It emits one (cluster, query) pair per cycle, with a last-of-cluster flag.
- **Sizes.** 32 dims per slice is chosen so that 32 slices hold the 960-dim GIST1M vectors. The 128 dims of SIFT and the 96 of DEEP fit comfortably.

Not built:
- The stacked memory itself, which is left as the channel ports.
- Offline training and vector-space division.

## 9. Files

| file | what it is |
|---|---|
| `rtl/anns_pkg.sv` | element width `B = 8`, precision field width, stage enum |
| `rtl/dcm_pe.sv`, `rtl/dcm_group.sv` | bit-serial lane and group of 32 |
| `rtl/dfm.sv`, `rtl/mem_ctrl.sv` | bit-plane fetch with ping-pong buffer; per-channel arbiter |
| `rtl/ppm.sv` | SVR precision predictor |
| `rtl/lsm.sv` | cost-based dispatch with neighbour offload |
| `rtl/drm_unit.sv`, `rtl/crossbar.sv`, `rtl/dist_lut.sv`, `rtl/tsm_pq.sv` | reduction, routing, LUT, top-k |
| `rtl/task_reorder.sv`, `rtl/sram_sp.sv` | query/cluster reorder; buffer macro model |
| `rtl/anns_amp_top.sv` | the accelerator |
| `tb/tb_<module>.sv` | self-checking test of each module |

## 10. Simulating

Every testbench checks itself. It compares the module against a model written
in the testbench, has a watchdog, and ends with a line
`TB_RESULT checks=N failures=M`. To run one with Verilator:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/anns_pkg.sv tb/tb_dcm_pe.sv --top-module tb_dcm_pe
    ./obj_dir/Vtb_dcm_pe

Where a latency is defined, it is checked:
- PE: `nd*P + P`.
- Group: `maxP*(nd+1) + 1`.
- DRM: 5 cycles, bypass 1.
- Predictor: `n_sv + 5`.

`tb_anns_amp_top` runs a whole search at reduced size:
- Size: 8 groups × 4 lanes, 4 dims per slice, 2 slots, 2 channels, 16-entry LUTs, queues of 8.
- Memory: a channel model with random ready and latency.
- Stages: query load, predictions of 4- and 6-bit sub-spaces, 40 CL tasks, task reorder, RC, 16 LC tasks and 12 DC vectors, each compared against a software model.
- Mechanisms: it counts input stalls, offloads, bypasses, pruning, low-precision tasks, prefetch overlapping a stream, and each of the four stages. It fails if any of them never happens.

The full-size configuration (32 768 PEs, 1024 queues of 128 entries) has no
testbench of its own. Verilator needs roughly 20 MB of memory per DCM group to
elaborate the top, so about 20 GB at the default 1024 groups. That build and a
full-size simulation were not run. The largest configuration
simulated end to end is the reduced one above. The PE and DRM-unit testbenches use their
default sizes. The other block testbenches override sizes to stay short.
