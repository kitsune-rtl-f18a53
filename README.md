# A type-aware grid scheduler for dataflow execution on GPUs

A GPU normally runs a deep-learning graph one operator at a time. Each operator
is a kernel, and a kernel's thread blocks (CTAs) are spread over all the
streaming multiprocessors (SMs). Only when they have all been sent out may the
next kernel begin. While a GEMM runs, the SIMT cores sit mostly idle. While an
element-wise or reduction kernel runs, the Tensor Cores do. Intermediate
tensors also make a round trip through DRAM.

Dataflow execution lays a subgraph of operators out in space instead. All its
kernels are resident at once, as a *spatial pipeline*. CTAs of one stage hand
tiles of data to CTAs of the next through ring queues kept in the L2 cache. Those
queues are plain software: loads, stores and L2 atomics, with no new hardware.
The one piece of hardware that has to change is the grid scheduler, the unit
that decides which SM each CTA goes to. It must:

* accept all kernels of a pipeline and dispatch them side by side, not one after
  another;
* put a Tensor-Core-heavy CTA and a SIMT-heavy CTA on the same SM, so both kinds
  of unit work at once.

This RTL is that scheduler. Each kernel's launch header says which kind of unit it
mainly uses: `OP_TENSOR` or `OP_SIMT`. The scheduler keeps **one round-robin SM
arbiter per kind**, each with its own priority pointer. The TENSOR kernels' CTAs
are dealt across the SMs in turn, and so, independently, are the SIMT kernels'.
Each SM therefore ends up with CTAs of both kinds. Before a CTA is sent, the
scheduler checks the target SM's recorded occupancy, as a conventional grid
scheduler does.

## Worked example

The running example is one MLP of MeshGraphNets on an A100-class part with
108 SMs. The pipeline has four kernels:

| kernel        | type   | CTAs |
|---------------|--------|------|
| Linear + ReLU | TENSOR | 34   |
| Linear + ReLU | TENSOR | 38   |
| Linear        | TENSOR | 36   |
| LayerNorm     | SIMT   | 108  |

The allocation gives each kind exactly as many CTAs as there are SMs. The kernels
are launched in that order. The TENSOR arbiter sends the first kernel's CTAs to
SMs 0–33, the second kernel's to SMs 34–71 and the third's to SMs 72–107. The SIMT
arbiter has its own pointer and sends the LayerNorm CTAs to SMs 0–107. Every SM
then holds one CTA of each type, and each type's 108 CTAs go out in 108
consecutive cycles. A single shared round-robin pointer would have started the
LayerNorm CTAs wherever the GEMM CTAs left off, and a first-fit policy would
stack same-type CTAs onto the lowest SMs. Neither guarantees the pairing.
`tb_kitsune_grid_scheduler` checks exactly this placement.

## Structure

```
                launch header (tag, type, #CTAs, threads/regs/smem per CTA)
                                   |
                         +---------v----------+
                         |    kernel_table    |  32 slots; one in-order list per type
                         +--+--------------+--+
              head TENSOR   |              |   head SIMT
              (need, slot)  |              |   (need, slot)
                         +--v--------------v--+
                         | sm_occupancy_table |  per SM: threads, regs, smem, CTAs
                         +--+-------+------+--+
            fit[TENSOR] ----+  fit_both     +---- fit[SIMT]
                            |       |       |
                   +--------v--+    |    +--v--------+
                   | rr_arbiter|----+--->| rr_arbiter|   SIMT request masked by
                   |  TENSOR   | gnt_tc  |   SIMT    |   the TENSOR grant when the
                   +-----+-----+         +-----+-----+   SM cannot hold both
                         |                     |
                  disp[TENSOR] (reg)     disp[SIMT] (reg) ---> SMs
                                                              |
   sm_done_valid/slot[108] ---> rr_arbiter (completions) --> release + CTA count
```

| module                   | role |
|--------------------------|------|
| `kitsune_pkg`            | `op_type_e`, launch header, dispatch message and occupancy structs, field widths |
| `kernel_table`           | holds the headers of the co-resident kernels. It counts CTAs left, dispatched and in flight, and signals kernel completion |
| `sm_occupancy_table`     | resources in use on each SM. It produces fit masks and books and frees resources |
| `rr_arbiter`             | round-robin arbiter. There are three instances: TENSOR SM choice, SIMT SM choice, and one completion per cycle |
| `kitsune_grid_scheduler` | the top, which wires the above together |

## One cycle of dispatch

1. **Heads.** The kernel table presents the oldest kernel of each type that still
   has CTAs to dispatch. The *type in the header* decides which list, and so which
   arbiter, a kernel joins. Within a type, kernels are served in launch order.
2. **Fit.** For each head, the occupancy table marks every SM where one more such
   CTA fits. A CTA fits when threads, registers, shared memory and CTA slots all
   stay within the SM's limits. A third mask, `fit_both`, marks SMs that could take
   one CTA of each type in the same cycle.
3. **Arbitrate.** The TENSOR arbiter grants the first fitting SM at or after its
   pointer. The SIMT arbiter then does the same. The one exception is the SM just
   granted to TENSOR: it is withheld from SIMT if it cannot hold both CTAs, so
   SIMT moves on to the next SM that fits. Both types can dispatch in the same
   cycle, even to the same SM.
4. **Commit.** At the clock edge, the winners' resources are booked and each
   pointer moves to the SM after its winner. The kernel's counters advance and
   the dispatch message is registered. SMs see `disp_valid[t]` one cycle after
   the decision. A kernel whose last CTA went out leaves its list, and the next
   kernel of that type dispatches in the very next cycle, with no bubble.

If no SM can take the head CTA of a type, that type waits and `stall[t]` is high.
It retries every cycle, and a completion freeing space ends the stall. The other
type is unaffected.

### Completion

When a CTA finishes, its SM raises `sm_done_valid[s]` together with the
CTA's kernel slot, and holds both until `sm_done_ready[s]`. Another round-robin
arbiter takes one completion per cycle. The table looks up the kernel's per-CTA
resources and the occupancy table releases them. When a kernel's last CTA
finishes, its slot is freed and `kdone_valid` pulses for one cycle with the
kernel's tag.

## Interface and timing

| port | dir | meaning |
|------|-----|---------|
| `launch_valid`, `launch_ready`, `launch_hdr` | in/out/in | one `kernel_hdr_t` per handshake; `launch_ready` is low while all 32 slots are in use |
| `disp_valid[2]`, `disp[2]` | out | registered dispatch per type (index 0 = SIMT, 1 = TENSOR): SM number, kernel slot, tag, CTA index |
| `sm_done_valid[NUM_SM]`, `sm_done_slot[NUM_SM]`, `sm_done_ready[NUM_SM]` | in/in/out | CTA completion per SM, held until ready |
| `kdone_valid`, `kdone_tag` | out | kernel finished |
| `stall[2]`, `idle`, `sm_occ[NUM_SM]` | out | status: head of type waits; no kernel active; per-SM usage |

Latencies:

* A header accepted at edge *k* can be dispatched in the cycle after edge *k*.
* Its first CTA is chosen in that cycle and appears on `disp` after edge *k+1*.
* Peak rate is one CTA per type per cycle.
* A completion taken at an edge frees its resources for the fit check of the next
  cycle.

Reset is asynchronous and active low, and clears every table.

SMs must accept every dispatch: resources are booked when the CTA is chosen, so
there is always room. Assertions check that:

* every booking fits;
* a paired booking on one SM fits both CTAs;
* releases and completions name resident CTAs;
* no grid is empty;
* dispatches come only from non-empty lists.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `NUM_SM` | 108 | the A100 SM count used throughout the evaluation |
| `SM_SMEM_BYTES` | 196608 | 192 KB of shared memory per SM, as stated for the A100 |
| `SM_MAX_THREADS` | 2048 | A100 limit (not stated in the paper) |
| `SM_MAX_REGS` | 65536 | A100 limit (not stated in the paper) |
| `SM_MAX_CTAS` | 32 | A100 limit (not stated in the paper) |
| `MAX_KERNELS` | 32 | this design's choice, the A100's number of hardware work queues |

Field widths in `kitsune_pkg` allow up to 256 SMs, 64 kernel slots and 65535
CTAs per kernel. `NUM_SM = 216` therefore also works, for example to study a
part with twice as many SMs.

## The inter-CTA queue (software, for reference)

The scheduler only places CTAs; the data moves through software queues. Each
queue is a ring of entries in the L2, with two entries for double buffering.
Each entry is one cache line of metadata and a payload. The metadata is a
sequence number, a count of writers done (`w_done`) and a count of readers done
(`r_done`), each padded to a cache line. One thread per CTA manages the queue:

* **write acquire of sequence *n*:** spin on an atomic read of entry
  *n mod len* until its sequence number equals *n*. Then write the payload.
* **write release:** increment `w_done` with an atomic add, after a CTA barrier.
* **read acquire of *n*:** spin until the sequence number equals *n* and
  `w_done` equals the number of writers. Then read the payload.
* **read release:** increment `r_done` with an atomic add.

The release routines are not spelled out in the source description. The version
modelled here has the last reader clear both counters and advance the entry's
sequence number by the ring length, which hands the entry back to the writer.

A pipeline only makes progress if all its CTAs are resident together, because a
consumer CTA holding an SM waits for its producer. The scheduler does not check
this. The software that builds the pipeline keeps each kernel's CTA count small
enough that everything fits, typically one CTA per SM per type.

## Verification

Every testbench is self-checking and ends with
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|-----------|----------------|
| `tb_rr_arbiter` | 3000 random request patterns on a 108-way arbiter against a reference scan; same-cycle grant; pointer wrap |
| `tb_sm_occupancy_table` | 12 SMs at A100 limits: fit masks (single and paired) and booked totals against a reference record, under random bookings and releases |
| `tb_kernel_table` | 4 slots: list heads, slot choice, CTA indices, resource lookup, kernel-done pulses and refused launches against a reference model |
| `tb_kitsune_grid_scheduler` | the top at its default size with behavioural SMs. Phases: the MLP allocation above (exact SM placement, one-cycle launch-to-dispatch latency, 108-cycle dispatch); a 54/54 TENSOR + 107/1 SIMT allocation; the seven-kernel backward pipeline of a Linear+ReLU layer (GEMMs on TENSOR, the rest on SIMT); a four-kernel TENSOR/SIMT/TENSOR/SIMT pipeline whose CTAs do not fit two to an SM; 60 random kernels. Throughout it checks no over-booking, CTA order, in-order kernels and one completion per kernel. It counts pairing, stalls, same-SM conflicts, simultaneous completions, a full kernel table and pointer wrap, and fails if any never happens |
| `tb_queue_pipeline` | the queue benchmark shape: 54 queues, 54 producer and 54 consumer CTAs, 100 iterations each, with a 14-cycle atomic latency (100 M atomics/s per CTA at 1.4 GHz). It runs the queue protocol above on behavioural SMs in three runs. TENSOR→SIMT pairs the CTAs on 54 SMs. SIMT→SIMT puts one CTA on each of 108 SMs. The third run has 27 queues, each with two writers whose parts the reader sums (a parallel reduce) and two readers (multicast). It checks that every payload arrives in order and that both spin loops ran |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert rtl/kitsune_pkg.sv rtl/rr_arbiter.sv \
  rtl/sm_occupancy_table.sv rtl/kernel_table.sv rtl/kitsune_grid_scheduler.sv \
  tb/tb_kitsune_grid_scheduler.sv --top-module tb_kitsune_grid_scheduler -o sim
./obj_dir/sim
```

Add `-Wno-fatal` if your Verilator treats the remaining style warnings as
errors. These are unused arbiter pointer outputs, and the reset used both as an
asynchronous reset and in assertion `disable iff`. Every testbench runs in
seconds.

## What follows the source design and what does not

Taken from the design as published:

* the kernel type in the launch header, with two classes, SIMT and TENSOR;
* one round-robin SM arbiter per type, chosen by the type of the arriving kernel;
* the per-SM occupancy record, and the occupancy check of the SM under
  consideration;
* co-resident kernels of a spatial pipeline;
* 108 SMs and 192 KB of shared memory per SM.

Choices made here, because the published description gives only the behaviour:

* the header format, and which four resources are tracked;
* dispatch of one CTA per type per cycle;
* TENSOR choosing first when both arbiters pick the same SM;
* in-order kernels within a type;
* the 32-entry kernel table;
* the completion interface and its arbiter;
* the pointer rule (next search starts after the winner);
* registered dispatch outputs and the reset style.

Known departures and limits:

* **No per-type limit on an SM.** The load-balancing model assumes that an SM
  runs one SIMT and one TENSOR CTA at a time. This scheduler pairs them through
  its two pointers and does not forbid a second CTA of the same type when there
  is room. With the allocations the compiler produces (each type's CTAs summing
  to the SM count), the result is one of each per SM, as the tests show.
* **No co-residency check.** If a pipeline's kernels do not all fit, the
  scheduler dispatches what fits and leaves the rest stalled. It does not detect
  that the pipeline will deadlock.
* **Parallel search instead of a walk.** The description has the scheduler
  check "the current SM under consideration", which suggests visiting one SM at
  a time. Here every SM is checked at once and the first fitting one from the
  pointer wins. This is the SM a step-by-step walk would reach, found in one
  cycle instead of many.
* **Dependencies not used.** The host API records the data dependencies between
  a pipeline's kernels, as a CUDA graph does. The scheduler does not need them:
  all kernels are resident at once, and the queues enforce the order of data.
* **Conventional behaviour not modelled.** Kernel priorities, preemption, the
  old one-kernel-at-a-time ordering for non-pipeline launches, and streams are
  not modelled.
* **Outside this RTL.** The SMs, L2, atomics, HBM and the PCIe host interface
  are existing GPU parts. They appear only as behavioural stand-ins in the
  testbenches.

## Workloads

The evaluated applications are DLRM, MeshGraphNets, NeRF, GraphCast and
Llama 3 8B, in inference and training. For them the scheduler's limit is the
number of kernels per pipeline, 32 slots:

* The fused-operator counts per inference application (17 to 41) are upper
  bounds on pipeline length.
* NeRF's whole forward pass, 24 operators, forms one pipeline and fits.
* The backward pipeline of a Linear+ReLU layer has 7 kernels.
* The largest training counts (up to 108 fused operators) are spread over
  several pipelines of unstated length.

CTA counts per kernel are at most the SM count under the balanced allocation,
far below the 65535 the header allows.
