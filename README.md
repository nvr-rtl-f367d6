# NVR: vector runahead prefetching beside an NPU

Sparse neural-network layers spend most of their time waiting for memory. Take a
sparse-times-dense product in CSR form. The NPU walks an index array `W` (column
indices) in order. Each index selects a row of a dense operand `IA` somewhere in a
large address space. A stream prefetcher covers `W` but cannot guess `IA[W[i]]`. And
because the NPU is data-parallel, one missing row stalls the whole vector.

NVR ("NPU vector runahead") computes those addresses early, before the NPU needs them:

- It watches the host CPU and the NPU through read-only probes.
- While the NPU's sparse unit is idle, it runs the index stream ahead of the NPU.
- For each batch of upcoming `W` elements it loads the index values with one vector load,
  computes all 16 dependent `IA` addresses at once, and prefetches those rows.
- The prefetched lines land in a small cache inside the NPU, the non-blocking speculative
  buffer (NSB). The NPU's real loads then hit there.

This repository is a synthesizable SystemVerilog model of that mechanism: the probes,
the three pattern detectors, the controller, the vectorising micro-instruction pipeline
and the NSB with its MSHR file. The CPU, the NPU itself and the L2 are not included.
`nvr_top` brings out their connection points as ports.

## The runahead loop

One pass, following a single NPU load:

1. **Probe.** The NPU's reorder buffer reports that load instruction *i* (port *p*,
   element address *a*) is executing. The `snooper` registers the event.
2. **Train and look up.**
   - The `stride_detector` learns the address stream of port *p* and predicts the next
     `W` address.
   - The `loop_bound_detector` says how many elements are left in the current loop.
   - The `sparse_chain_detector` holds, for port *p*, how an index becomes an `IA`
     address.
3. **Request.** If the prediction is confident and elements are left, the `nvr_controller`
   asks the sparse unit for speculative execution (`runahead_req`). It waits until the
   unit reports `sparse_idle`.
4. **Lower.** The controller cuts the remaining elements into micro-instructions of up to
   N = 16 elements, `{port, first W address, stride, count}`. It sends one per cycle to the
   `vmig`.
5. **Vectorise.** The VMIG turns each micro-instruction into two vector memory operations:
   - a vector load of the 16 `W` values;
   - once the values are back, one vector prefetch of the `IA` lines they select.
6. **Buffer.** The prefetches allocate lines in the `nsb`. The NPU's own loads are served
   from it, or merge into a refill already in flight.

The run stops at the loop bound. If the sparse unit turns busy in the middle (the NPU
needs it again), the run stops early. Whatever was already issued completes.

## Where each address comes from

### Stride detector: the `W` stream

One entry per parallel load port holds:

- the previous address and the stride;
- a 2-bit saturating confidence;
- the last address handed to a prefetch (the *prefetch pointer*).

Training works like a classic reference-prediction table. A repeated stride raises the
confidence. A different stride lowers it, and replaces the stride once the confidence
is zero. A prediction is given from confidence 2 on. It is `prefetch pointer + stride`.

Each entry also counts how many elements the prefetch pointer leads the demand stream
(`ahead`). This is this design's addition, and it matters:

- The loop bound detector counts the elements left from the element being loaded now.
  Part of that range may already have been prefetched by an earlier run.
- A run therefore prefetches `remaining - ahead - 1` elements (the `-1` is the element
  being loaded now).
- Without this, each new trigger would prefetch past the end of the loop.

Every demand access behind the pointer consumes one unit of `ahead`. A demand access
that overtakes the pointer pulls the pointer up to it.

### Loop bound detector: how far to go

The Sparse Structure Table (SST) has N entries in two modes:

- **Sparse mode.** Entry *p* belongs to parallel port *p*. Its iteration counter and bound
  come from the sparse unit's registers, IdxPtr start and IdxPtr end. These change per row
  and are only known at run time. The snooper forwards them whenever they change. A port
  whose registers stay all-zero is unused and never configured.
- **Normal mode.** The other entries learn ordinary counted loops from committed CPU
  branches: for `bge r1, r2, end`, they learn the PC, the loop variable, its increment and
  the bound. A bound seen again raises a 4-bit boundary confidence.

A query for port *p* is answered as follows:

- If entry *p* is in sparse mode, the answer is `bound - iteration`.
- Otherwise the answer comes from the most recently updated normal loop, once its bound
  has been seen twice.
- Otherwise the answer is 0, and no runahead happens.

### Sparse chain detector: from index to `IA` address

The Indirect Pattern Table (IPT) has 2 × N entries. Each holds:

- valid;
- the `IA` start address (`ss_start`);
- the span `idx_end - idx_start` (`ss offset`);
- the last prefetched index (LPI);
- a 4-bit vector size (log2 of the `IA` row in bytes).

The vector size is taken from the snooped NPU load. Its compute port evaluates, for 16
lanes at once:

    IA_address[k] = ss_start + (W[k] << vector_size)

`sparse_chain_sel` chooses which half of the table the sparse unit's registers are written
to. Half 0 serves the first operand's chains; half 1 serves a second sparse operand. A
lane whose entry is not valid produces no prefetch. This happens, for example, for a
dense loop on a port the sparse unit does not use.

## The VMIG pipeline

The VMIG has three stages plus a wait slot:

| stage | work | cycles |
|---|---|---|
| IRU | lane k gets `w_base + k·stride`; lanes ≥ count are masked; issues the `W` vector load | 1 after the micro-instruction is accepted |
| W slot | waits for the `W` values (the VRF register) | memory latency |
| PIE | 16 dependency chains in parallel through the IPT | 1 after the `W` data |
| VIGU | `IA` addresses → 64-byte line numbers; a lane repeating a lower lane's line is masked; emits one vector prefetch | 1 after PIE |

- Each stage holds one operation.
- A new micro-instruction enters the IRU while the previous one waits for its data.
- Several runs' worth of prefetches therefore overlap in the memory system. This
  memory-level parallelism is what the pipeline exists for.

The `nvr_vload_seq` helper executes the two vector operations on the NPU's load path:

- It sends one element request per cycle into the NSB. The `W` load goes first, because
  the next prefetch depends on it.
- It gathers the 32-bit `W` elements into the VRF image.
- The NPU's own demand loads always win the NSB port. NVR uses the remaining cycles.

## The NSB

The NSB is a 16 KiB, 16-way set-associative cache of 64-byte lines (16 sets):

- Tags live in flip-flops.
- Replacement is round-robin per set.
- A demand hit answers in the next cycle.

Its MSHR file (`nsb_mshr`) has 8 entries with 4 target slots each. It makes the buffer
non-blocking:

- **Demand miss.** Allocates an MSHR, or joins the one already fetching that line
  (coalescing). The buffer keeps serving hits meanwhile.
- **Prefetch miss.** Allocates an MSHR but no target. If the line is already on its way,
  the prefetch is dropped. It is also dropped when no MSHR is free: a prefetch is never
  worth stalling the NPU for.
- **Demand with no room.** A demand miss that finds no free MSHR or target slot holds
  `req_ready` low.
- **Refill.** When a line returns from the L2 it is written, and the waiting targets are
  answered one per cycle.

## Top level, `nvr_top`

| port group | direction | meaning |
|---|---|---|
| `cpu_commit_*` | in | committed CPU instruction: branch flag, PC, both compared register values |
| `npu_load_exec*` | in | NPU load executing in the ROB: PC, parallel port, element address, vector size |
| `sparse_regs[N]`, `sparse_idle`, `sparse_chain_sel` | in | the sparse unit's per-port `{IA start, IdxPtr start, IdxPtr end}`, its idle flag, and the IPT half |
| `runahead_req` | out | NVR asks the sparse unit for speculative execution |
| `npu_req_*` / `npu_resp_*` | in/out | NPU demand loads into the NSB (64-bit words, 4-bit id) |
| `l2_req_*` / `l2_resp_*` | out/in | line refills from the L2 (tag = MSHR index, 512-bit data) |
| `in_runahead`, `events` | out | status, and one-cycle strobes for performance counters |

`events` (type `nvr_events_t` in `nvr_pkg`) has one strobe for each of:

- runahead entered, skipped, waiting for idle, aborted, or a micro-instruction clipped by
  the bound;
- VIGU duplicate merge and PIE drop;
- NSB hit, miss, coalesce, prefetch drop and stall.

All state is reset, except the NSB data array, which is read only for valid lines.

## Sizes

| parameter | default | origin |
|---|---|---|
| N (entries per table, lanes per vector) | 16 | paper |
| SCD entries | 2 × N = 32 | paper |
| address / PC width | 48 bits | paper |
| W-element stride field | 8 bits | paper |
| IdxPtr, LPI, ss offset | 10 bits | paper |
| loop counter, increment, bound | 16 bits | paper |
| vector size field | 4 bits | paper |
| NSB size | 16 KiB | paper |
| NSB ways / line | 16 / 64 bytes | own choice (the paper says "high-way") |
| MSHRs × targets | 8 × 4 | own choice |
| confidence threshold | 2 | own choice |

These fields limit the workloads:

- One sparse loop of a port spans at most 1023 elements.
- The `W` stride is at most ±127 bytes.
- An `IA` row is at most 32 KiB.

## Departures from the paper and open points

- **The `ahead` count.** The stride detector's `ahead` count, and subtracting it from the
  loop bound, are this design's. The paper only says that the bound prevents excessive
  prefetching.
- **Both branch operands.** The snooper keeps both branch operands. The paper's storage
  table lists one 64-bit register, but learning an increment needs the loop variable as
  well as the bound.
- **Loop hierarchy.** Loop levels are tracked only as far as "the most recent normal loop
  answers ports without a sparse entry". The 2-bit level confidence is counted but does
  not select among levels. The paper gives no rule for it.
- **Per-lane `W` values.** The address formula uses each lane's own `W` value. The LPI
  field records the last lane's `W`.
- **Second IPT half.** The second half of the IPT is written when `sparse_chain_sel` is
  1, but the VMIG's chains always read half 0. The paper sizes the table at 2 × 16
  entries without saying how the halves are used.
- **Vectorised length.** The chain detector computes the vectorised length
  (`idx_end - idx_start`) as in the paper's figure. Runs take their length from the loop
  bound detector instead, which also tracks the current index.
- **NSB banks.** The NSB is a single bank. The paper's figure draws several banks, each
  with MSHRs, but gives neither their number nor the address mapping.
- **VMIG storage.** The VMIG keeps full 48-bit addresses per lane in the IRU and VIGU.
  The paper's storage budget (an IRU of 4N+4 bits, a 256-bit VIGU) suggests a more
  compact encoding that it does not describe.
- **Snooped signals.** The NPU-side PC probe is taken from the load event. The sparse
  unit's indices list is not snooped: `W` values are read back by NVR's own vector load
  instead.
- **Own policies.** These are all this design's own:
  - the controller's FSM;
  - the abort-on-busy rule;
  - one run at a time;
  - the NPU-first arbitration;
  - the request tag layout `{source, lane}`;
  - the drop policy for prefetches;
  - all handshakes.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_snooper` | only branches reach the branch port; one-cycle latency; a sparse update only on change |
| `tb_stride_detector` | confidence after the fourth access; negative strides; the `ahead` count. Random trains and advances are compared with a reference model |
| `tb_loop_bound_detector` | sparse and normal bounds, boundary confidence, the fallback to the normal loop |
| `tb_sparse_chain_detector` | the address formula on random data, both table halves, the LPI update |
| `tb_nvr_controller` | counts 16/16/8 on consecutive cycles, waiting for idle, back-pressure, `ahead`-limited runs, abort |
| `tb_vmig` | lane addresses, in-order `W` data, the 2-cycle `W`→prefetch latency, duplicate-line masking; a model of memory and SCD |
| `tb_nsb_mshr` | allocation, coalescing, target limits, issue order, fill |
| `tb_nsb` | data correctness against a memory model; one-cycle hits; misses, coalescing, prefetch drops, stalls under random traffic |
| `tb_nvr_top` | full size, end to end (below) |
| `tb_nvr_workloads` | the 4 KiB NSB with INT8, FP16 and INT32 `IA` rows (16, 32 and 64 bytes); graph-like, top-k-like and clustered (point-cloud-like) index shapes; data, no over-prefetching, and coverage of at least half the `IA` loads (61–73% measured) |

`tb_nvr_top` runs the top at its default parameters. It plays the CPU, the NPU and an L2
with 20–50 cycles of latency. It runs two phases:

- **Sparse phase.** A 20-row CSR product on port 0. The sparse unit is busy in bursts.
- **Dense phase.** A counted loop on port 2, whose bound comes from CPU branches.

It checks that:

- all NPU data are correct;
- NSB hits answer in one cycle;
- no `W` line beyond the current row's last element and no unselected `IA` row is ever
  requested from the L2 (no over-prefetching);
- at least half of the `IA` loads hit or join a refill in flight (about 90% do);
- the dense loop is prefetched ahead of the demand stream;
- every event in `events` fires at least once.

A run takes a few seconds.

### Running a testbench

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_nvr_top \
        rtl/nvr_pkg.sv $(ls rtl/*.sv | grep -v nvr_pkg) tb/tb_nvr_top.sv
    obj_dir/Vtb_nvr_top

Replace `tb_nvr_top` with any other testbench name. The package must come first. All
files in `rtl/` may be passed to every testbench.
