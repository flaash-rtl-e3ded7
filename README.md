# FLAASH: a sparse tensor contraction engine in SystemVerilog

Contracting two sparse tensors along one mode,

    C[{a},{b}] = sum_i A[{a},i] * B[{b},i],

is a set of independent sparse dot products, one for every pairing of a fiber
of A with a fiber of B. A fiber is the row of entries you get by fixing every
coordinate except the contraction index `i`. This design takes the FLAASH
architecture (Kulp, Ensinger and Chen, "FLAASH: Flexible Accelerator Architecture for
Sparse High-Order Tensor Contraction") literally:

* a job generator lists the fiber pairs;
* a pool of small, independent Sparse Dot Product Engines (SDPEs) each takes
  one pair at a time, walks the two fibers' nonzeros in index order and
  multiply-accumulates where the indices meet;
* a tensor memory serves the SDPEs' reads and collects their results.

Only nonzeros are stored, and only nonzeros are fetched. The run time therefore
depends on the number of nonzeros and the number of fiber pairs, not on the
tensors' volume. The order of a tensor does not matter to the hardware: a
high-order tensor is just a longer list of fibers.

The RTL is written for this document from the published description. Where
the description stops, the design makes its own choices. These are pointed out
below and in the header comment of each file.

## Data layout

**Operands (compressed sparse fiber).** Each operand is stored as two arrays:

* `entries`: the nonzero `(index, value)` pairs, fiber after fiber. Within a
  fiber they are in increasing index order. `index` is the position along the
  contraction mode.
* `ptr[0..F]`: fiber `f` occupies `entries[ptr[f] .. ptr[f+1]-1]`. An empty
  fiber has `ptr[f] == ptr[f+1]`.

Fibers are numbered in row-major order of their free-mode coordinates. For
example, a 3x3x1024 tensor contracted on its last mode has 9 fibers, numbered
`3*i0 + i1`. A 3x3x3x3x3x512 tensor has 243. The contraction mode must be the
innermost (fastest-varying) mode of the stored layout. The host prepares that
layout: there is no mode-selection hardware.

**Numbers.** Values are signed 16-bit integers and indices are 16 bits. The
accumulator and the results are signed 32-bit and wrap on overflow. Pointers
and addresses are 16 bits. All of these are set in `flaash_pkg`.

**Result.** C is stored dense. The operands have `FA = a_cnt-1` and
`FB = b_cnt-1` fibers, and C has `FA*FB` entries:

    C[a][b] is at address res_base + a*FB + b        (A's free modes outermost)

Job number `j` is the pair (`a = j / FB`, `b = j % FB`). This is the paper's
job order: with 2 A fibers and 3 B fibers the jobs are (0,0) (0,1) (0,2)
(1,0) (1,1) (1,2). A result that comes out zero is never written. The result
region is marked all-zero when it is allocated, so it reads back correctly.
To get a sparse result, the host converts the dense one in a single pass.

## Block structure

```
 host (DMA/PCIe side, not built)
   |  operand entries          |  fiber pointers, a_cnt, b_cnt, start
   v                           v
 +---------------+      +------------------- job_generator ----------------+
 | tensor_memory |      | contraction_enum -> job queue (sync_fifo) ->     |
 |  A entries    |      |                              scheduler (RR)      |
 |  B entries    |      +-----------------------------------|--------------+
 |  C (dense)    |                                          | one job/cycle
 |  3 RR arbiters|<== A,B reads / C writes ==>  sdpe[0..N_SDPE-1]
 +---------------+
```

| module | role |
|---|---|
| `flaash_top` | wires everything; host ports |
| `job_generator` | enumeration + central job queue + scheduler + completion |
| `contraction_enum` | holds the pointer arrays, makes one job per cycle |
| `scheduler` | hands the head job to the next SDPE with room, round robin |
| `sdpe` | local job queue, two `fiber_loader`s, `intersect_mac`, `result_storage` |
| `fiber_loader` | streams one fiber's entries from memory into a FIFO |
| `intersect_mac` | index merge and multiply-accumulate |
| `result_storage` | queues finished results until memory takes them; drops zeros |
| `tensor_memory` | A/B/C arrays, allocation, read/write arbitration |
| `sync_fifo`, `rr_arbiter` | generic queue and round-robin arbiter |
| `flaash_pkg` | widths, `elem_t`, `job_t`, `result_t`, default sizes |

A job (`job_t`) is five pointers: the start and end of the A fiber, the start
and end of the B fiber, and the result address. The SDPEs never see tensor
coordinates. All pointer arithmetic happens in the job generator, and the
SDPEs address memory with physical pointers.

## Inside an SDPE

The SDPE is the part worth understanding in detail. It is small, and it
behaves differently from one job to the next.

1. **Launch.** A job waits in the 2-entry local job queue until three things
   are idle: the intersection unit and both loaders. A loader counts as idle
   only when no read of its own is still in flight. In the launch cycle the
   job is popped, both loaders load their bounds, and the intersection unit
   clears its accumulator and latches the destination.
2. **Fetching.** Each loader issues one read per entry. It keeps at most one
   read in flight, and only issues a read when the 4-entry FIFO has room for
   the data. If it gets a grant every cycle, it delivers one entry per
   cycle. A loader raises `done` once the last entry of its fiber has arrived
   in its FIFO.
3. **Merging.** Each cycle in which both FIFO heads are present, the
   intersection unit compares their indices:
   * equal: it multiplies the two values, adds the product to the
     accumulator and pops both heads;
   * the A index is larger: it pops B;
   * the B index is larger: it pops A.
4. **End of job.** The job ends as soon as *either* fiber is exhausted, that
   is, its loader is done and its FIFO is empty. This is the loop condition
   of the paper's algorithm (`while A_ptr < A_end and B_ptr < B_end`). What
   is left of the other fiber cannot produce a match and is never examined.
   An empty fiber therefore ends its job at once.
5. **Hand-over.** The intersection unit offers `{dest, acc}` to the result
   queue. In the cycle the queue takes it, both loaders are flushed. A flush
   clears the FIFO, stops fetching, and drops a read still in flight when its
   data comes back. The next job can launch in the following cycle.
6. **Write-back.** The result queue writes nonzero results to C whenever the
   memory grants a write. Zero results are accepted and discarded. Because
   finished results wait here, the SDPE does not have to wait for the memory
   before starting its next job.

Timing of a job with `k` index comparisons and no memory contention: launch,
then one cycle for the loaders to start, two cycles until the first entries
are in both FIFOs, then `k` comparison cycles, one end-detection cycle and one
hand-over cycle. The intersection unit checks `k + 2` cycles from its start
to hand-over when its inputs never stall. A loader's last entry is taken
`n + 3` cycles after start for an `n`-entry fiber.

## Job generation, dispatch and completion

`start` latches the pointer counts `a_cnt` and `b_cnt`. The job generator then
does the following:

* It computes `Job Count = (a_cnt-1)*(b_cnt-1)`.
* In one cycle it allocates `Job Count` result entries from tensor memory.
  If they do not fit, `error` is raised and the contraction ends at once.
* It emits the jobs in order, one per cycle, into a 4-entry job queue. Two
  nested counters (B inner, A outer) replace the paper's division and modulo;
  they produce the same job order.

The scheduler takes at most one job per cycle from the head of the queue. It
gives the job to the first SDPE with room in its local queue, searching in
round-robin order from the SDPE after the one served last.

`done` rises when all four of these hold, and stays high until the next
`start`:

* every job has been generated;
* the job queue is empty;
* every SDPE is idle, with its result queue drained;
* the number of jobs reported finished equals Job Count.

`res_base` then points at C and `nnz_count` holds its number of nonzeros.

## Tensor memory

The paper leaves this unit open. This design implements it as follows:

* **Three arrays.** A and B (`OP_DEPTH` = 4096 entries each) are read-only
  during a contraction. C (`RES_DEPTH` = 1024 entries) is write-only.
* **Operand allocation.** The host appends entries with `ld_valid`; each
  memory keeps a fill level. `ld_clear` frees all three memories. An append
  to a full memory sets `ld_overflow`.
* **Result allocation.** A free pointer marks the end of the allocated part
  of C. Allocation clears the per-entry "written" bits of the new region.
  Entries that have not been written read as zero.
* **Ports.** By default (`SHARED_READ = 0`) every SDPE loader has its own
  read port on A and on B, as if the operand memories were replicated or
  banked per SDPE. Every request is served at once, and the data returns one
  cycle later. With `SHARED_READ = 1` each operand memory has a single read
  port, granted round robin among the loaders. C takes one write per cycle,
  round robin, in both modes.

**Why per-SDPE read ports are the default.** With one shared port every job
streams its B fiber through the same B port, so the SDPE count stops
mattering: in the workload sweep, 8 SDPEs on a shared port take 13 534 cycles
on 3x3x1024 at 10%, about the same as 1 SDPE (15 664). The paper's timings do
scale with the SDPE count, so its memory must deliver more than one entry per
cycle. The paper does not describe that memory. A port per SDPE is the
simplest model that matches its behaviour. Measured at the default size
(8 SDPEs), with 5%-dense tensors against 50%-dense matrices:

| contraction | jobs | cycles (= ns at 1 GHz) | paper, FLAASH at 5% |
|---|---|---|---|
| 3x3x1024 x 3x1024 | 27 | 2 160 | about 1.6 us |
| 7x7x512 x 7x512 | 343 | 11 170 | about 11 us |
| 10x10x100 x 10x100 | 1000 | 6 033 | about 6 us |
| 3x3x3x3x3x512 (700 nonzeros) x 3x512 | 729 | 16 765 | (normalised only) |

These are close to the paper's figures. With the shared port the same runs
took 13 434, 82 657, 41 191 and 128 114 cycles. The results are the same in
both modes.

`tb_flaash_workloads` repeats the paper's sweeps on the RTL:
* **SDPE count.** On 3x3x1024 at 10%, the time falls from 15 664 cycles with
  1 SDPE to 2 327 with 8 and 590 with 32. The step from 16 to 32 SDPEs still
  halves the time, because this layer has only 27 jobs. The paper sees little
  gain beyond 32 SDPEs.
* **Volume.** At a constant number of nonzeros per fiber, a 7x longer
  contraction mode changes the time by at most 1.4x.
* **Order.** At a constant nonzero count, higher orders take longer. They
  have more fibers, and so more jobs.

## Using the top level

```
flaash_top #(N_SDPE=8, OP_DEPTH=4096, RES_DEPTH=1024, PTR_DEPTH=256, SHARED_READ=0)
```

1. Pulse `ld_clear`.
2. Stream A's entries with `ld_valid`, `ld_sel = SEL_A` and `ld_elem = {idx, val}`,
   one per cycle, then B's with `SEL_B`. The pointers are offsets from 0 into
   each operand's entries.
3. Write the pointer arrays with `ptr_wr_en`, `ptr_wr_sel`, `ptr_wr_addr` and
   `ptr_wr_data` (`a_cnt` pointers for A, `b_cnt` for B, at most `PTR_DEPTH`
   each).
4. Pulse `start` with `a_cnt` and `b_cnt`.
5. Wait for `done`. Check `error`: the result did not fit, or a count is out
   of range.
6. Read `C[a][b]` by setting `rd_addr = res_base + a*(b_cnt-1) + b`; the
   value appears on `rd_data` one cycle later.

Only `ld_clear` frees C. Consecutive contractions without a clear each take a
new result region.

All sizes are parameters. The defaults hold every workload the paper
evaluates:

* The largest operand is 7x7x512 at 10%, about 2 500 nonzeros (4096 per
  operand memory).
* The largest dense result is 10x10x10 = 1000 entries (1024 in C).
* The longest pointer array belongs to the order-6 operand: 244 pointers
  (256 per operand).

Changing the SDPE count (the paper sweeps 1 to 32) only changes `N_SDPE`.

## What follows the paper and what does not

Taken from the paper:

* the four-part organisation;
* the SDPE's five components;
* the intersection rule and the end-of-job condition;
* job enumeration by Eqs. 4 to 6, in the paper's job order;
* round-robin dispatch, at most one job per cycle;
* the completion rule (queue empty, then all SDPEs idle);
* the preallocated dense result;
* skipping zero results;
* pointer translation in the job generator and physical-pointer requests
  from the SDPEs;
* 8 SDPEs as the default.

Choices of this design, where the paper is silent:

* all widths and the number format;
* all queue depths;
* the memory handshake, latency, port count and arbitration;
* one entry per loader request;
* the flush of the longer fiber's remainder;
* the written-bit mechanism that makes unwritten result entries read as zero;
* the allocation-failure error;
* the host port protocol.

Described by the paper but not built:

* **The input/output unit.** The paper keeps DMA/PCIe out of scope. Its side
  of the design appears as the host ports.
* **Partial dot-product jobs** ("dot product decomposition"). The paper
  mentions them as possible and says it did not implement them.
* **Read-before-write memory prioritisation.** The paper gives it only as an
  example.
* **Contraction along a mode other than the innermost stored one.** The host
  must lay the operand out accordingly.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_sync_fifo` | random traffic against a queue model, clear |
| `tb_fiber_loader` | exact entry stream under random grants and pops, empty fiber, mid-fiber flush with a read in flight, `n+3` cycle full-rate load |
| `tb_intersect_mac` | dot products and match counts against a reference merge, early end, `k+2` cycle timing |
| `tb_result_storage` | write order, zero dropping, back-pressure only when full |
| `tb_sdpe` | 200 random jobs with random memory stalls, including an all-zero fiber |
| `tb_contraction_enum` | the paper's 2x3-fiber example, random pointer arrays, one job per cycle, allocation failure |
| `tb_scheduler` | order, one-hot dispatch, round-robin choice, stall strobe |
| `tb_job_generator` | each job dispatched exactly once, completion only after all jobs and idle SDPEs |
| `tb_tensor_memory` | fill levels, overflow, read data and latency per port in both read modes, fairness, allocation, zero read-back |
| `tb_flaash_workloads` | the SDPE-count, volume, order and density sweeps on 1 to 32 SDPEs; checks every result entry and the expected trends |
| `tb_flaash_top` | seven contractions on a 3-SDPE instance (orders 3 to 5, empty fibers, dense, many short jobs, result too large, recovery). It counts each mechanism and fails if one never happens: match, skip, early end, empty-fiber job, zero dropped, scheduler stall, full local queue, read conflict, write conflict, allocation error |
| `tb_flaash_full` | the default-size design on the paper's three contraction layers and the order-6 case; checks every result entry and prints cycle counts |

`tb_flaash_top` also counts cycles with a full result queue. At its size that
cannot happen: a port waits at most `N_SDPE-1` cycles for a write, and no job
finishes in that time. So it is reported but not required.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/flaash_pkg.sv tb/tb_flaash_full.sv --top tb_flaash_full
./obj_dir/Vtb_flaash_full
```

Variables that are never reset start at random values in a two-state
simulator. The design resets all of its control state. Memory contents are
only read after they have been written, or are masked by the written bits.
