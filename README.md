# CoroAMU hardware in SystemVerilog

Far or disaggregated memory can take hundreds of nanoseconds to a microsecond to
answer. One way to hide that latency is to run many coroutines on one core. Each
coroutine issues an asynchronous memory request and suspends itself, and a
scheduler resumes whichever coroutine's data has arrived. This only pays off if
switching between coroutines is nearly free. In a software scheduler two costs
dominate:

* polling for a finished request and branching to its coroutine, a data-dependent
  indirect branch that the branch predictor almost always gets wrong;
* one switch for every small request.

CoroAMU extends an Asynchronous Memory Unit (AMU) to remove both costs. The AMU
is an L2-side engine that moves data between far memory and a scratchpad (SPM)
and reports finished request IDs.

* **`bafin`** is a branch that jumps straight to the resume point of a finished
  coroutine. The memory unit already knows which coroutines have finished. It
  passes each finished ID and resume offset to the branch predictor ahead of
  time. The predictor then predicts every `bafin` with the target the backend
  will compute, so the scheduler's branch is no longer mispredicted.
* **Aggregated requests** bundle several lines into one completion, so a
  coroutine switches once per group rather than once per request. A group is
  either a multi-line `aload`/`astore` or an `aset(ID, n)` that binds the next
  `n` requests to one ID.
* **`await`/`asignal`** let coroutines sleep and wake each other, for locks and
  nested coroutines. They use the same request table and completion queue.

This repository holds the RTL for these additions: the AMU request path, the
L2 request table, the SPM, the completion queues, the branch-predictor side, and
the programmable far-memory latency and bandwidth stages of the evaluation
platform. The out-of-order core, its base branch predictors, the caches and the
memories are not included. The top module brings their connections out as
ports.

## Instruction interface

Instructions enter the AMU as `amu_instr_t` `{op, id, opnd, spm_addr}`.

| op | meaning |
|---|---|
| `aload`  | far memory → SPM, `opnd` = address operand |
| `astore` | SPM → far memory |
| `aset`   | `opnd[7:0]` = n: the next n aload/astore count as one group with this `id` |
| `await`  | register `id` as waiting; it finishes only when an `asignal` for `id` arrives |
| `asignal`| wake the coroutine waiting on `id` |

The 64-bit address operand of `aload`/`astore` carries more than the address:

| bits | field |
|---|---|
| `[63:48]` | resume-PC offset, signed, relative to the `bafin` that will resume the coroutine |
| `[47:44]` | log2 of the request size in bytes, 3..12 (8 B … 4 KB) |
| `[39:0]`  | byte address in far memory (8-byte aligned) |

Placing the size and resume offset in the high address bits is the paper's idea.
The exact bit positions are this design's. ID 0 means "no ID". IDs are 10 bits
(`ID_W`): 9 bits cover the 512 coroutines the SPM is sized for, and the top bit
gives nested child coroutines their own IDs.

The core side uses two more operations:

* `getfin` returns a finished ID, or 0.
* `bafin` behaves as `getfin` and also jumps to `bafin PC + resume offset` of
  that ID, or falls through when nothing has finished. It writes back
  `{SPM address[15:0], handler base + ID × handler size}`: the coroutine's data
  slot and its context ("task info") address.
* `aconfig` sets the handler base and handler size.

## Block map

```
 issue ─► amu_req_queue(16) ─► amu_req_splitter ─► amu_l2_engine (request table, 64) ◄─► amu_spm (32 KB) ◄─ core_spm_*
                                                       │   ▲
                                  far_bw_ctrl ◄─ mem req │   │ mem resp ─► far_resp_delayer
                                      │                  │   │                 ▲
                                      ▼ mem_req_*        ▼   └─────────────────┘ mem_resp_*
                                                 amu_finished_list (1024)
                                                       ▼
  ex_* (getfin/bafin) ◄─► bafin_exec ◄─ amu_aconfig    amu_finished_queue(16) ─► bafin_target_queue(8) ─► bafin_pred_table(4) ─► p_*
```

| module | role |
|---|---|
| `coroamu_pkg` | widths, sizes, operand layout, shared structs |
| `amu_req_queue` | 16-entry FIFO of issued AMU instructions |
| `amu_req_splitter` | cuts requests into 64 B line requests; applies `aset` binding; marks the last line of each group |
| `amu_l2_engine` | the Request Table: grouping, issue to far memory, SPM fill/drain, completion, await/asignal |
| `amu_spm` | 32 KB scratchpad, 8 banks of 64-bit words; line port for the AMU, word port for the core |
| `amu_finished_list` | L2-side FIFO of completed groups |
| `amu_finished_queue` | core-side Finished Queue with EnqPtr/BafinPtr/WbPtr/CmtPtr |
| `bafin_target_queue` | BTQ: finished IDs waiting for a `bafin` prediction |
| `bafin_pred_table` | BPT: 4-entry predictor for `bafin` instructions |
| `bafin_exec` | result, target and misprediction check of `getfin`/`bafin` |
| `amu_aconfig` | handler base/size registers and the handler address multiply |
| `far_bw_ctrl` | token-bucket bandwidth cap, 1..32 B/cycle |
| `far_resp_delayer` | fixed programmable response latency, up to 4095 cycles |
| `coroamu_top` | all of the above wired together |

## The bafin oracle path

This is the least obvious part of the design. A finished ID has to reach the
frontend before the `bafin` that will consume it is fetched. It must not be
lost or used twice when the pipeline is redirected. Three structures share this
job.

### Finished Queue: four pointers

The Finished Queue is a 16-entry ring of `{ID, resume offset, SPM address}` with
four wrap-bit pointers that always satisfy `CmtPtr ≤ WbPtr ≤ BafinPtr ≤ EnqPtr`.

* **EnqPtr**: new completions from the Finished List enter here.
* **BafinPtr**: the next entry to copy to the BTQ. Entries between WbPtr and
  EnqPtr are finished but not yet consumed. Only these may be sent to the BTQ.
* **WbPtr**: the entry the next executed `getfin`/`bafin` takes. It is resolved
  combinationally in the cycle `ex_valid` is high. The queue returns the pointer
  it used (`ex_fq_ptr`). If that entry had not been sent to the BTQ yet,
  BafinPtr advances with it. If it had been sent, `btq_deq` tells the BTQ to
  drop its copy.
* **CmtPtr**: the oldest entry whose instruction has not committed. `cmt_valid`
  frees it. Entries are freed only at commit, so a backend redirect can still
  give them out again.

On a **backend redirect** (a mispredicted `bafin`, or any other flush)
the core supplies `be_redirect_fq_ptr`, the WbPtr after the last surviving
`getfin`/`bafin`. WbPtr and BafinPtr both return to it, and the BTQ is
flushed. As a result, every entry the squashed instructions had taken is sent
to the frontend again.

### Bafin Target Queue: three pointers

The BTQ is an 8-entry ring with three pointers:

* `head`: oldest entry still held;
* `pred`: next entry not yet used by a prediction;
* `tail`: next free slot.

A prediction takes the entry at `pred` and carries its BTQ pointer
(`p_btq_ptr`) down the pipeline.

* **Pre-decode redirect** (`fe_redirect_valid`, `fe_redirect_btq_ptr`): `pred`
  moves back. The entries used by the wrong-path predictions become unused
  again, and the queue keeps its contents.
* **Backend redirect**: the queue is emptied. The Finished Queue refills it as
  described above.
* **`btq_deq`**: the head is dropped when the matching `bafin` writes back.

### Bafin Predict Table

The BPT holds the PCs of up to 4 `bafin` instructions. Each executed `bafin`
trains it, with round-robin replacement. For every 32 B fetch block it checks
whether a known `bafin` is in the block. If one is, and the base predictors do
not predict a taken branch earlier in the block, the BPT overrides them:

* with an unused BTQ entry: it predicts taken to `bafin PC + sext(offset)` and
  gives that entry's ID (`p_id`);
* with an empty BTQ: it predicts fall-through, `PC + 4`.

The result is registered and appears one cycle after the lookup. The backend
passes the predicted direction and ID back in with the executed `bafin`
(`ex_pred_taken`, `ex_pred_id`). `bafin_exec` flags a misprediction when the
direction differs, or when both are taken but the IDs differ. A completion that
arrives after the prediction was made can cause the direction to differ.

## Aggregated requests and the Request Table

The splitter emits one line request per cycle. Each carries the memory line,
the SPM line, an 8-bit mask of the 8-byte words it touches, and a `last` flag.
A 4 KB `aload` becomes 64 line requests. An 8 B `aload` becomes one request
with one mask bit set. After `aset(ID, n)`, the next `n` requests use that ID,
and only the final line of the n-th request has `last` set.

In the L2, each line request takes one Request Table entry (64 entries). An
entry holds the fields ID, SIZE (word mask), TYPE (load/store/wait), SPM
address, REF NUM, Parent Entry and Resume PC.

* Grouping:
  * The first request of an ID with no open group becomes the **primary** entry
    and records the resume offset.
  * Later requests of the same ID become **children**: they point at the primary
    and increase its REF NUM.
  * `last` closes the group.
* Memory traffic:
  * Pending entries issue one per cycle, the lowest index first. The entry index
    is the memory tag.
  * An `aload` line comes back and is written into the SPM under its mask.
  * An `astore` first reads its SPM line, taking one cycle, then sends a masked
    line write.
* Completion:
  * Each response increments the primary's response counter. A child entry is
    freed once its response is counted.
  * When the group is closed and its response count equals REF NUM, the
    primary sends one completion `{ID, resume offset, SPM address of the
    primary}` and is freed.

Up to 64 lines can be in flight, which matches the MLP of 64 that the paper
measures.

The Finished List between the table and the Finished Queue has one slot per
ID. It therefore never refuses a completion, and the table can always free a
finished group. With a short list, a full Finished Queue (the core not polling)
would keep finished groups in the table. New requests could then not enter,
and a program that issues all its requests before polling would deadlock. The
end-to-end test hit exactly this with an 8-entry list.

## Waiting and signalling

`await(ID)` allocates a wait-type primary entry that never issues memory
traffic. `asignal(ID)` takes no entry. It finds the waiting entry of that ID and
completes it as though a response had arrived. The ID then flows through the
Finished Queue and can be resumed by `bafin` like any other. If no matching
await exists, `asignal_miss` pulses and the signal is dropped. Software must
issue the `await` first.

For a nested coroutine, the caller `await`s on its own ID. The child runs with
`ID + (1 << 9)`, and its final `asignal` wakes the caller.

## SPM and task info

The SPM is 32 KB, as in the paper: one way of an 8-way L2, enough for 512
coroutines.

* It has 8 banks of 64 bits.
* The AMU writes whole lines under a word mask and reads whole lines.
* The core reads or writes 64-bit words with byte strobes (`core_spm_*`).
  Reads return one cycle later.
* If both write the same word in one cycle, the AMU write wins.

`aconfig` sets a handler base and a per-coroutine handler size. A resumed
`bafin` returns `base + ID × size` as the address of the coroutine's saved
context.

## Far-memory emulation

The evaluation platform places far memory behind two programmable stages.
Both are included because the test uses them:

* `far_bw_ctrl` is a token bucket. It gains `cfg_rate` bytes of credit per cycle
  (1..32 B/cycle), holds at most 128 B, and charges 64 B per line request.
* `far_resp_delayer` stamps each response on arrival and releases it
  `cfg_latency` cycles later, in order. The platform's 300–3000 cycles
  (100 ns – 1 µs at 3 GHz) fit in the 12-bit setting.

The memory behind them is external. The testbenches use a small behavioural
model (`tb/hbm_model.sv`) that returns a fixed pattern: word `w` of line `L` is
`{L[31:0], 24'h0, w[7:0]}`. It also records writes.

## Timing summary

| path | latency |
|---|---|
| Request Queue enqueue → splitter output | 1 cycle (registered FIFO) |
| splitter | 1 line request per cycle |
| Request Table | accepts 1 request, issues 1 memory request, takes 1 response and sends 1 completion per cycle |
| astore | +1 cycle SPM read before the memory request |
| `getfin`/`bafin` | resolved combinationally in the cycle presented |
| BPT | prediction registered, 1 cycle after the lookup |
| SPM core read | 1 cycle |
| bandwidth regulator | combinational pass when credit ≥ 64 B |
| response delayer | exactly `cfg_latency` cycles (later if the path is busy) |

## Simulating

Every block has a self-checking testbench in `tb/`. Most of them run directed cases first. A random phase then compares the block cycle by cycle against a separate model, for example a pointer model of the Finished Queue or the BTQ. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_coroamu_top \
    rtl/coroamu_pkg.sv $(ls rtl/*.sv | grep -v _pkg) tb/hbm_model.sv tb/tb_coroamu_top.sv
./obj_dir/Vtb_coroamu_top
```

Replace the top-module name and testbench file to run any other testbench.
`hbm_model.sv` is only needed by the L2 engine and top tests.

`tb_coroamu_top` runs the whole design at its default sizes: no parameter
overrides, 2400-cycle latency, 8 B/cycle. A scheduler model drives 96
coroutines through 5 suspensions each. The kinds of suspension are:

* a 64 B `aload`;
* a 256 B `aload`;
* an `aset` group of two `aload`s;
* an `await` later woken by an `asignal`;
* an `astore`.

On every resume the test checks:

* the ID is one that is waiting;
* the jump target is `bafin PC + offset`;
* the task-info value is correct;
* the SPM or memory holds the data of the request.

It also counts each mechanism and fails if any never happened. The mechanisms
are:

* correct `bafin` predictions, about 476;
* mispredictions with backend redirect and resend, about 4;
* fall-throughs;
* pre-decode rollback;
* multi-line requests and `aset` groups;
* `await`/`asignal` and `astore`;
* bandwidth stalls;
* the programmed delay;
* more than one request in flight, up to 64.

It takes about 32,000 cycles and runs in seconds.

`tb_coroamu_workloads` runs two kernels through the whole design with both
scheduler styles. Each kernel stands for one end of the benchmark mix that
CoroAMU targets:

* **GUPS** is latency-bound. Each update is an 8 B random `aload`, an XOR done
  by the core in the SPM, and an 8 B `astore`.
* **STREAM** is bandwidth-bound. It scans memory in 1 KB chunks, one
  coarse-grained `aload` per chunk.
* **NESTED** is the nested-coroutine call sequence from the waiting and
  signalling section. A parent `await`s. Its child is started by a pair of
  `await(child, entry)` and `asignal(child)`. The child does an `astore`,
  then wakes its parent.

The two schedulers are:

* a software scheduler that polls with `getfin`;
* the `bafin` scheduler.

| kernel | scheduler | latency (cycles) | bandwidth (B/cycle) | coroutines |
|---|---|---|---|---|
| GUPS | `getfin` | 300 | 32 | 96 |
| GUPS | `bafin` | 3000 | 32 | 96 |
| STREAM | `bafin` | 600 | 8 | 24 |
| STREAM | `getfin` | 2400 | 1 | 24 |
| NESTED | `bafin` | 900 | 16 | 24 parents + 24 children |

The test checks the following:

* every value read against a reference;
* the final GUPS memory contents;
* that GUPS finishes in under 1/8 of the serial time;
* that STREAM never beats the bandwidth cap;
* that each NESTED parent resumes only after its child has finished.

For example, 768 GUPS suspensions at 300-cycle latency finish in about 3,900
cycles. With `bafin` at 3000 cycles, about 99 % of resumes are predicted
exactly.

## Where this design departs from or goes beyond the paper

The paper describes the mechanisms and the sizes below. It does not describe
signal-level behaviour, so everything else is a choice of this design.

Taken from the paper:

* 16-entry Request and Finished Queues, a 4-entry single-cycle BPT with
  priority over the other predictors, and a 32 KB SPM;
* the Request Table fields;
* primary/child grouping with a response counter;
* `await` as a non-access request and `asignal` as a matching response;
* the Finished Queue's four pointers;
* the BTQ's two rollback behaviours;
* granularity up to 4 KB;
* platform ranges of 1–32 B/cycle and 300–3000 cycles.

This design's own choices:

* operand bit layout, a 10-bit ID and a 64 B line;
* 64 Request Table entries, an 8-entry BTQ, and a Finished List with one slot
  per ID;
* the completion rule (closed and count = REF NUM) and lowest-index-first
  issue;
* `bafin` targets relative to the `bafin` PC, and fall-through prediction on an
  empty BTQ;
* the exact meaning of each FQ pointer and the redirect pointer interface;
* the task-info packing `{SPM address, handler address}`;
* token-bucket regulation and timestamp-FIFO delay.

Known limits:

* Every pending `await` holds a Request Table entry until its `asignal`
  arrives. The waiting coroutines plus the lines in flight therefore share
  the 64 entries.
  * More outstanding loads than entries only stall issue until entries free.
  * More than 64 pending waits cannot be held. The issue path then stalls for
    good: 64 parent/child pairs, 128 waits, lock up.
  * So at most 64 coroutines can be suspended at once. This is short of the
    512 coroutines the SPM has room for. Raising `RT_ENTRIES` lifts the limit,
    at the cost of a larger fully associative table.

* `asignal` with no waiting `await` is dropped (reported on `asignal_miss`)
  rather than remembered.
* Only one scheduler, and so one set of `bafin` PCs, is expected at a time; the
  paper makes the same assumption.
* Requests must be 8-byte aligned. A request crossing a 4 KB boundary is split
  by lines like any other.
* The core pipeline, its base predictors, the L1/L2/LLC caches and the DDR/HBM
  memories are outside this RTL. Their interfaces are the top-level ports.
