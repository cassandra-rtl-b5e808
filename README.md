# Branch trace replay for constant-time cryptographic code

Constant-time cryptographic code is written so that its control flow does not depend on
secrets. The loop counts, calls and returns follow from public parameters such as the key
length or the number of rounds. Speculative execution breaks this guarantee: a mispredicted
branch can run the code out of order, for example skipping the last rounds of a cipher and
leaking an intermediate secret. This RTL implements the frontend half of a defence that takes
away control-flow speculation for crypto code without stalling it. The branch predictor is not
used for crypto branches. Instead, each crypto branch's sequence of outcomes is recorded ahead
of time, compressed, and replayed by a small **Branch Trace Unit (BTU)** in the fetch stage.
Fetch then always follows the sequential (architectural) path of the crypto code, and a crypto
branch can never be mispredicted. Non-crypto code keeps its ordinary branch predictor. One
integrity check stops that predictor from steering fetch into crypto code.

The design follows the Cassandra proposal ("Efficient Enforcement of Sequential Execution for
Cryptographic Programs"). The proposal was evaluated in a cycle-level simulator, not in RTL. Every
size and element format here is the proposal's. The control details are filled in by this
design, and each one is listed under "Where this RTL departs from or adds to the description".

## 1. How a branch's trace is encoded

An offline tool records every target of each static branch. Runs of the same target are
aggregated (`PCa x4`). Repeated sequences of runs are then factored out as patterns. The
result for one branch has two parts:

* a **pattern set** of at most 16 *pattern elements* `{delta: 12-bit signed target offset from
  the branch PC, reps: 8-bit repetitions}`. Overlapping patterns share elements.
* a **trace** of *trace elements* `{pidx: 4, psize: 4, pcnt: 8, tcnt: 16}`. Each element
  means "play the pattern window `pset[pidx .. pidx+psize-1]` `tcnt` times". `pcnt` is the
  sum of the window's `reps`, which is the number of branch outcomes in one pass. The trace
  ends with an End-of-Trace marker (here: `psize == 0`). The trace repeats from its start
  when it reaches the marker.

Example: the return of a small S-box routine that is called three times from a round loop and
once more after it. The return goes back into the loop three times (`L`) and then once to the
tail of the caller (`T`). The whole program does this twice:

```
pattern set   0: {delta(L), reps 3}   1: {delta(T), reps 1}
trace         0: {pidx 0, psize 2, pcnt 4, tcnt 2}   1: End of Trace
outcomes      L L L T L L L T | L L L T ...
```

Each branch also carries a 14-bit hint in its instruction encoding. The proposal suggests
otherwise-ignored x86 prefix bytes. The hint holds:

| bit(s) | field | meaning |
|---|---|---|
| 13 | single_target | the branch always goes to `PC + offset`; no BTU entry is used |
| 12:1 | offset | single-target offset, or the trace-region offset of a multi-target branch |
| 0 | short_trace | the whole trace fits in one 16-element trace cache entry |

The field order is this design's choice. A multi-target crypto branch with offset 0 has no
recorded trace, because its trace depends on the input (for example a stream loop). Fetch waits
until that branch resolves.

## 2. The Branch Trace Unit

The BTU has three tables, `ENTRIES = 16` entries each. They are direct-mapped on the low 4 bits
of the branch PC, and they are inclusive: an entry is either in all three tables or in none.

| table | module | per entry |
|---|---|---|
| Pattern Table (PT) | `pattern_table` | 16 pattern elements (the pattern set) |
| Trace Cache (TC) | `trace_cache` | a window of 16 trace elements, the fetch-side position |
| Checkpoint Table (CT) | `checkpoint_table` | one checkpoint: trace index, latest and original pattern/trace counters |

The element storage is 16x16x20 + 16x16x32 + 16x60 bits = 1.74 KiB.

### Two positions: fetch runs ahead of commit

This is the part of the design that needs the most care. A branch can be looked up many times
before its first lookup commits. So each entry has two positions:

* **Fetch position** (TC). It is held as live counters in the trace-cache slots plus a fetch
  pointer to the slot in use. `p` is the number of outcomes left in the current pass of the
  pattern, and `t` is the number of passes left. A lookup reads the slot at the fetch pointer.
  It computes the position inside the pass as `pcnt - p`. The PT walks the running sum of `reps`
  over the window to find the element that covers this position. The target is
  `PC + sign_extend(delta)`. At the clock edge `p` is decremented. When `p` reaches 0 it is
  reloaded with `pcnt` and `t` is decremented. When `t` reaches 0 the fetch pointer moves to the
  next slot. This lets fetch run ahead of a head element that is finished but not yet committed.
  If the fetch pointer runs past the loaded slots, the lookup is not ready and fetch waits.
  There is no fall-back to prediction.
* **Commit position** (CT). Every commit of a branch that got its target from the BTU advances
  the CT's *latest* counters in the same way. When they show the head element finished, the CT
  raises `cm_head_done`, and the TC drops its head slot and shifts the window by one:
  * *short trace*: a fresh copy of the removed element, with its original counters, goes to the
    back of the loaded slots. The entry then rotates for ever without touching memory.
  * *long trace*: the back slot is left empty. The controller prefetches the next trace element
    from memory into it. End of Trace sets the read index back to 0.

  The CT then points at the new head: its trace index, and its original counts.

**Squash.** A ROB squash (`squash`) resets every entry's fetch side to the commit side. The head
slot takes the CT's latest counters. Every other slot takes its original counters, and the fetch
pointer returns to the head. This is correct when a squash removes every uncommitted BTU branch,
as a pipeline flush does. A squash that keeps some older uncommitted crypto branches would need a
per-branch undo, which this RTL does not have. When a squash and a commit happen in the same
cycle, the restore uses the counters as they are after that commit.

### Misses, eviction and memory

Each multi-target branch owns a *trace region* in memory made of 64-bit words. The region starts
at byte address `PC + (hint.offset << 6)`:

| word | content |
|---|---|
| 0 | checkpoint: bit 63 = resume, bits 59:0 = checkpoint element |
| 1 .. 16 | pattern elements (bits 19:0) |
| 17 + i | trace element i (bits 31:0); End of Trace after the last |

An all-zero checkpoint word means "start at element 0". On a lookup miss the controller goes
through these steps:

1. It waits until the direct-mapped victim has no looked-up but uncommitted instances.
2. It writes the victim's checkpoint word back and invalidates the victim.
3. It reads the new branch's checkpoint, its 16 pattern words, and its trace elements from the
   checkpointed index. A short trace is read once around. A long trace is read until 16 slots are
   full.
4. It applies the checkpoint to the head slot.

Meanwhile fetch stalls on this branch (`SRC_WAIT`). A branch that comes back therefore resumes
exactly where it committed. `flush_req` writes back and invalidates every entry, which is meant
for a context switch between two crypto programs. Other resident branches keep answering lookups
while the controller works. The memory port carries one request at a time with a valid/ready
handshake. A read returns one `mem_resp_valid` pulse some cycles later.

## 3. Next-PC selection (`fetch_redirect`, `crypto_pc_ranges`)

The Crypto PC Ranges register (`NUM_RANGES = 2` ranges of the form `[base, limit)`) classifies
the fetched branch. This gives the select of a 0/1 multiplexer in front of fetch:

| branch | next PC | `next_src` |
|---|---|---|
| non-crypto, BPU target outside crypto code | BPU prediction | `SRC_BPU` |
| non-crypto, BPU target inside crypto code | none: wait for resolution (integrity check) | `SRC_RESOLVE` |
| crypto, single-target hint | `PC + offset` | `SRC_HINT` |
| crypto, multi-target, BTU ready | BTU target | `SRC_BTU` |
| crypto, multi-target, BTU miss or refill | none: retry | `SRC_WAIT` |
| crypto, multi-target, no trace (offset 0) | none: wait for resolution | `SRC_RESOLVE` |

Crypto branches never look up the BPU (`bpu_lookup_en`) and never update it (`bpu_update_en`
is only set for non-crypto commits). Single-target crypto branches never use a BTU entry.

## 4. Top level: `cassandra_frontend`

| group | signals | notes |
|---|---|---|
| ranges | `csr_wr_en, csr_wr_idx, csr_wr_enable, csr_wr_base, csr_wr_limit` | takes effect next cycle |
| fetch | `br_valid, br_pc, br_hint` -> `next_valid, next_pc, next_src` | combinational in the cycle the answer is available; hold the branch while `SRC_WAIT` |
| BPU | `bpu_lookup_en`, `bpu_next_pc`, `bpu_update_en` | the predictor itself is outside |
| commit | `cm_valid, cm_pc, cm_from_btu` | in order, at most one BTU commit per cycle; `cm_from_btu` = the branch's `next_src` was `SRC_BTU` |
| recovery | `squash`, `flush_req` -> `flush_busy` | |
| memory | `mem_req_valid/ready/we/addr/wdata`, `mem_resp_valid/rdata` | trace regions |
| events | `ev_miss, ev_evict, ev_prefetch, ev_wrap, ev_refresh, ev_integrity` | one-cycle pulses for counters |

All state changes on the rising edge, and reset (`rst_n`) is synchronous and active low. A BTU
hit is answered in the cycle of the lookup. The default parameters are the evaluated
configuration: `ENTRIES = 16`, `ELEMS = 16`, `PC_W = 64` (x86). `INFLIGHT_W = 10` covers a
512-entry ROB. The shared element types and the memory layout constants are in
`rtl/cassandra_pkg.sv`.

The branch predictor (LTAGE in the evaluation), the fetch, decode, execute and commit pipeline,
and the memory hierarchy belong to the host core and are not part of this RTL. The offline
trace analysis (trace recording, run-length aggregation, k-mer based pattern search) is
software and is not part of it either. Two ideas that the proposal only discusses are not built either.
One is a mode register that selects one of several traces per branch, for example for AES-128,
192 or 256. The other is a reduced variant that supports only single-target branches.

## 5. Where this RTL departs from or adds to the description

* **Replacement.** The description calls the tables direct-mapped and also mentions LRU
  eviction. A direct-mapped table has only one candidate, so this RTL is direct-mapped.
* **Bookkeeping beyond the 32-bit trace element.** Each TC slot keeps an unmodified copy of its
  element and its trace index. Each entry keeps a tag, the region base, a read ("tail") index and
  an in-flight count. The copy is what lets a squash restore slots other than the head.
* **Checkpoint resume bit.** This marks whether the latest counters are meaningful. It lets
  software initialise a region with a zero checkpoint word.
* **Eviction waits for in-flight instances** of the victim, so a commit always finds its entry.
* **Squash** restores every entry to its committed position (see section 2).
* **Flush writes checkpoints back.** The description only says the BTU is flushed.
* **Encodings and layout.** End of Trace is `psize == 0`. The bit order of the hint, the
  trace-region layout and base address, the memory handshake, "hint offset 0 = no trace", and
  the range register format are all this design's own.
* **Counter meaning.** The trace element is defined so that `pcnt` counts the outcomes of one
  pass of the pattern and `tcnt` counts the passes. The description of the fetch flow also says
  that reaching `pcnt == 0` moves on "to the next pattern element". This RTL follows the element
  definition. The pattern element within a pass is found from the outcomes already used
  (`pcnt - p`), by walking the running sum of `reps` combinationally.
* **Hint use at fetch.** The description lets a BTU hit go ahead without the decoded hint. Here
  `br_hint` must be valid together with `br_pc`, because it also selects the single-target path.
  A core that has the hint only later can hold the branch in `SRC_WAIT` until it has it.
* **Throughput.** One BTU lookup and one BTU commit per cycle. The evaluated core is 8 wide.
* **Pattern counter width.** A pattern whose repetitions add up to more than 255 cannot be
  expressed in the 8-bit `pcnt`. The trace tool must split it.

## 6. Simulation

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Shared testbench code is in `tb/trace_gen.sv` and
`tb/trace_mem_model.sv`:

* `trace_gen.sv` is a reference model that builds random or hand-written pattern sets and
  traces, writes their memory regions, and expands them into the plain target sequence.
* `trace_mem_model.sv` is a behavioural memory with random back-pressure.

| testbench | what it checks |
|---|---|
| `pattern_table_tb` | window walk against a reference walk, 3000 random lookups |
| `trace_cache_tb` | long (refilled, wrapping) and short (rotating) entries, lookups/commits/squashes against an outcome-by-outcome expansion |
| `checkpoint_table_tb` | head-finished after exactly `pcnt*tcnt` commits, checkpoint words, load/read-back |
| `branch_trace_unit_tb` | 6000 lookups over 5 branches with conflicts; targets against the expanded traces, same-cycle hits, squash, flush and resume; counts misses, evictions, prefetches, wraps and refreshes |
| `crypto_pc_ranges_tb`, `fetch_redirect_tb` | range boundaries; next-PC decision table |
| `cassandra_frontend_tb` | whole frontend at default sizes. It runs the toy two-block AES program of the worked example three times, with every next PC compared against the program's real control flow. It then runs a random mix of crypto/non-crypto branches, squashes and a flush. It fails if any mechanism never occurs. |
| `cassandra_workloads_tb` | whole frontend at default sizes, with traces as large as those measured for 15 constant-time programs from BearSSL, OpenSSL, Kyber and SPHINCS+ (largest per-branch size 2312 elements, for RSA-2048). The branch contents are random stand-ins, because only their sizes are known. Each long trace is streamed past its End of Trace, and resident short traces must replay with no memory reads. |

Run one testbench with plain Verilator, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/cassandra_pkg.sv tb/trace_gen.sv tb/cassandra_frontend_tb.sv \
    --top-module cassandra_frontend_tb -o sim
./obj_dir/sim
```

(`-Wno-fatal` lets lint warnings through. Testbenches that do not use `trace_gen` can leave it
out.) Assertions in `branch_trace_unit` check that a BTU commit always finds its entry resident,
and that a memory request is held until it is accepted.

## 7. How far to trust it

The tests compare every target against an independent expansion of the recorded trace, and the
toy program against its real control flow. They cover misses, evictions, prefetch, End-of-Trace
wrap, short-trace rotation, squash and flush. Limits of the testing:

* They drive the BTU at most one lookup and one commit per cycle.
* Squashes are always full.
* The trace regions are always well formed: pattern windows inside the set, and no trace longer
  than 4096 elements.

Behaviour outside these conditions has not been exercised. Timing closure and area have not been
studied beyond a generic synthesis.
