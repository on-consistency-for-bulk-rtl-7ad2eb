# Ordered, coherent PIM operations for bulk-bitwise processing-in-memory

A bulk-bitwise PIM memory computes inside its arrays. One PIM operation
("PIM op") may rewrite a whole region of memory, and it commits the moment
it executes: it cannot be rolled back. The host sends these ops from its
cores to memory, past caches that may hold stale copies of the lines the op
is about to change. Two things can then go wrong:

* **Coherence.** A line cached before the op is read after it with its old
  value. Software flushes do not cure this. A prefetch or another thread can
  bring the line back between the flush and the op.
* **Ordering.** The caches, the on-chip network and the cores can reorder a
  PIM op against loads and stores. A program then sees orders that break
  the host's own fence rules.

This RTL implements hardware that solves both. It rests on three ideas:

1. **Scopes.** PIM memory is split into fixed, disjoint *scopes*, here 2MB
   huge pages. A PIM op may touch any address of its scope and nothing else,
   and its address names the scope. The host needs no knowledge of the PIM
   instruction set. It only needs the scope.
2. **Flush on the way down.** When a PIM op reaches the last-level cache
   (LLC), every line of its scope is flushed before the op goes on to the
   memory controller. The flush and the op are atomic: the LLC accepts no
   fills in between. Two small structures make this cheap:
   * The *scope buffer* remembers the scopes already flushed, so a stream of
     ops to one scope scans only once.
   * The *scope bit-vector (SBV)* marks the cache sets that hold any
     PIM-enabled line, so a scan visits only those sets.
3. **Ordering at the entry point.** Each core's entry into the memory
   subsystem (its write buffer) holds back the operations that its
   consistency model forbids to pass an in-flight PIM op. The memory
   controller ACKs a PIM op once the op is in its queue. From then on the
   controller keeps the op's order with every later access to the same
   scope, so the entry point may let those accesses go.

There are four consistency models, from strict to relaxed. The parameter
`MODEL` selects one:

| model | what may pass an in-flight PIM op | extra fence | scope buffer + SBV |
|---|---|---|---|
| `MODEL_ATOMIC` | nothing | no | LLC only |
| `MODEL_STORE` | whatever may pass a store (x86-TSO: loads to other scopes) | no | LLC only |
| `MODEL_SCOPE` (default) | every operation to another scope | between scopes | LLC only |
| `MODEL_SCOPE_RELAXED` | everything except fences; no ACK | scope-fence within a scope, fence between scopes | every cache level |

The scope model is the default because it lets PIM ops to different scopes
interleave. It was found to be the fastest of the four where the models
differ.

## How a PIM op travels

```
core c ──► entry_point[c] ─┬─ loads, stores ─────────────► mem_* ports (host caches)
   ▲                       └─ PIM ops, fences ─► [L1 cache_pim_unit[c]] ─┐  (scope-relaxed only)
   │                                                                      ▼
   │                                                               req_arbiter
   │                                                                      ▼
   │                                              LLC cache_pim_unit  (scope buffer, SBV, scan)
   │                                                                      ▼  writebacks, then the op
   └──────────────── ACK (core, scope) ◄──────────────────────────── mc_ack_queue ──► mc_* ports
```

`pim_consistency_top` wires these together. The host supplies the rest
through ports:

* the cores (`core_*`, one operation per core per cycle, at commit);
* the cache data arrays and the coherence protocol, which report fills,
  write hits and invalidations (`llc_*`, `l1_*`), and which are told of
  every line a scan drops (`llc_flushed_*`, `l1_flushed_*`);
* the memory scheduler, DRAM and the PIM module (`mc_*`).

## The entry point: who may pass whom

`entry_point` holds up to `DEPTH` operations in program order. Every cycle
it sends the oldest one that its model lets go, so a held operation does not
block younger ones that may leave. In other words it is a non-FIFO write
buffer. It records each PIM op it sends in an outstanding table keyed by
scope, and clears the entry when the controller's ACK for that scope
returns. The rules for an entry are as follows. "Older" means an entry still
buffered ahead of it, and "outstanding" means sent but not yet ACKed.

* **All models.** A store waits for older stores. A load waits for older
  stores to the same line. Operations to one scope leave in program order.
  Nothing passes an older cross-scope fence.
* **Atomic.** Nothing leaves while a PIM op is outstanding or still
  buffered ahead. A PIM op leaves only as the oldest entry. This mirrors a
  core that brackets the op with fences and commits it only on the ACK.
* **Store.** A PIM op counts as a store. It waits for older stores and PIM
  ops. Younger stores and PIM ops wait for its ACK. Loads to other scopes
  pass it. Loads to its scope wait for the ACK.
* **Scope.** An operation waits only while a PIM op to its own scope is
  outstanding. PIM ops to different scopes overlap. The cross-scope fence
  waits until it is the oldest entry and every ACK is in. It is then
  retired inside the entry point.
* **Scope-relaxed.** No ACKs and no holding for PIM ops. A scope-fence
  waits for older operations of its scope and keeps younger ones of its
  scope behind it. Fences and scope-fences go down the PIM path so that the
  caches can act on them.

The `tb_entry_point` testbench drives the same sequences through all four
models and lists, phase by phase, which operations each model lets out.
It is the quickest way to see the difference between the models.

## Scan, scope buffer and scope bit-vector

`cache_pim_unit` is the PIM support of one cache level. It has four parts:

* `cache_tag_array`: the cache's tags, with valid, dirty and a
  **PIM-enabled** bit per line. The bit comes with the fill, because the
  page is marked PIM-enabled in its translation entry.
* `scope_buffer`: set-associative, indexed by the low bits of the scope
  number, with LRU replacement.
* `scope_bit_vector`: one bit per set.
* `cache_scan_ctrl`: handles one PIM op or fence at a time.

The rules that keep the three structures consistent:

* A host **fill** erases the line's scope from the scope buffer. A cached
  copy of the scope now exists again, so the next PIM op must scan.
* **Every change to a set** (fill, invalidation, scan flush) rewrites that
  set's SBV bit to "some valid line here is PIM-enabled". This covers
  setting the bit on insertion and rechecking the remaining lines on
  eviction.
* A **PIM op at the LLC** is looked up in the scope buffer:
  * On a hit it is forwarded 2 cycles after acceptance.
  * On a miss the controller scans. Each scan cycle asks the SBV for the
    lowest flagged set at or above a pointer and reads that set's metadata.
    It then either flushes one line of the scope, or moves the pointer past
    the set. A dirty line leaves as a `OP_WRITEBACK` on the output stream
    and reaches the controller queue ahead of the op.
  * When no flagged set is left, the scope is inserted and the op is
    forwarded.
* **Scan time** is one cycle per flagged set visited, plus one per line
  flushed, plus a last cycle that finds nothing, plus any output stalls.
  Sets whose bit is low cost nothing.
* `host_block` is high from lookup to insert. While it is high the host
  cache must hold its fills, writes and invalidations. This makes the flush
  and the op atomic, and no line can slip into a set that was already
  scanned.
* Every line a scan drops, clean or dirty, is reported on
  `flushed_valid`/`flushed_addr` in the cycle it goes. The host uses this
  to drop the data copy and, since the LLC is inclusive, to invalidate the
  copies in the L1s above.
* **Scope-fences** use the same lookup, scan and insert at every level. They
  end at the LLC. **Fences** pass through and end at the LLC.
* **At L1** (`IS_LLC=0`, scope-relaxed only) PIM ops pass unscanned but stay
  on the path, so that a later scope-fence cannot overtake them.
  Scope-fences scan L1. The L1 writebacks travel on the op stream and mark
  the line dirty in the LLC, so the LLC scan sends them to memory.

## Parameters

The defaults are those of the evaluated system:

| parameter | default | from |
|---|---|---|
| `NUM_CORES` | 6 | evaluated host |
| `LLC_SETS` x `LLC_WAYS` | 2048 x 16 (2MB, 64B lines) | evaluated L2/LLC |
| `LLC_SB_SETS` x `LLC_SB_WAYS` | 64 x 4 | evaluated LLC scope buffer |
| `L1_SETS` x `L1_WAYS` | 64 x 4 (16KB) | evaluated L1 |
| `L1_SB_SETS` x `L1_SB_WAYS` | 16 x 1 | evaluated L1 scope buffer |
| scope size | 2MB (`pim_pkg::SCOPE_OFF_W = 21`) | evaluated system |
| physical address | 35 bits (`pim_pkg::PA_W`) | 32GB main memory |
| `EP_DEPTH` | 8 | this design's choice |
| `MCQ_DEPTH` | 16 | this design's choice |
| `MODEL` | `MODEL_SCOPE` | this design's choice (see above) |

Other sizes follow from these parameters:

* An 8MB LLC needs `LLC_SETS=8192`.
* More than 8 cores needs a wider `pim_pkg::CORE_W`.

## Where this RTL departs from, or adds to, the description it follows

* **Scan rate and timing.** One flagged set per cycle and one flushed line
  per cycle are this design's choice. No scan rate is specified. The ~38
  cycle mean LLC scan quoted for the YCSB runs is a workload average and is
  not reproduced.
* **Scope-fences and the scope buffer.** A scope-fence that hits the scope
  buffer skips its scan.
* **Cross-scope fence.** The fence that orders PIM ops of different scopes
  is an existing mechanism whose internals are not given. Here it is modelled
  only by its effect at the entry point (and, in scope-relaxed, by travelling
  down the in-order PIM path).
* **The on-chip network.** The network between the cores and the LLC may
  reorder and have several paths. Here it is a round-robin `req_arbiter` with
  one path per core. It keeps each core's order, which is one of the allowed
  behaviours. Duplicating a scope-fence over parallel paths is therefore not
  built.
* **Strict same-scope order.** The entry point keeps operations to one scope
  in order in every model. The scope-relaxed model allows more reordering
  than this, so the RTL is stricter than needed there, never looser.
* **The atomic model's fences.** The "fence before the PIM op" of the atomic
  model waits for older operations to leave the entry point, not for them to
  complete in the caches.
* **Cache metadata only.** Data arrays, MESI states, the host's replacement
  policy (round-robin here) and store-to-load forwarding are outside this
  design.
* **When the ACK is sent.** It is sent when a PIM op enters the
  controller's in-order queue. A full queue back-pressures the LLC and, in
  turn, the entry points. This is how a busy PIM module throttles the host.

Not built: the cores, the cache data paths and coherence protocol, the
memory scheduler, DRAM and the PIM module with its own buffer. They connect
through the top's ports.

## Files

* `rtl/pim_pkg.sv`: address, scope and operation types, and the model enum.
* `rtl/scope_buffer.sv`, `rtl/scope_bit_vector.sv`, `rtl/cache_tag_array.sv`,
  `rtl/cache_scan_ctrl.sv`, `rtl/cache_pim_unit.sv`: the cache-side support.
* `rtl/entry_point.sv`: the per-core ordering logic.
* `rtl/req_arbiter.sv`, `rtl/mc_ack_queue.sv`: the path to, and ACK from,
  the memory controller.
* `rtl/pim_consistency_top.sv`: the whole path.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/tb_top_scope_relaxed.sv`: the top in the scope-relaxed model.
* `tb/tb_workload_ycsb.sv`: a YCSB-style scan workload on the full-size top.

## Verification

Every testbench checks its block against values it computes itself. Each
ends with a line `TB_RESULT checks=N failures=M`, and has a watchdog.

* **Blocks with a reference model.** `scope_buffer`, `scope_bit_vector`,
  `cache_tag_array`, `req_arbiter` and `mc_ack_queue` are driven with random
  traffic and compared with a reference model.
* **`cache_scan_ctrl`** is checked for the exact writeback set and order of
  a scan, for its cycle count (from a model of the SBV-guided walk), for the
  2-cycle hit latency, and for the rule that a fill makes the scope stale.
* **`entry_point`** is checked for the order each of the four models lets
  operations out in, phase by phase, as ACKs arrive.
* **`tb_pim_consistency_top`** runs the full-size top (default parameters,
  scope model). Cores 0 and 1 issue PIM ops, loads and a flood of PIM ops
  into a stalled memory side. It checks the following:
  * writebacks precede their PIM op;
  * a load to a PIM op's scope waits for the ACK, while a load to another
    scope passes;
  * every PIM op arrives exactly once;
  * each mechanism occurs at least once: scope-buffer hit, scan, SBV skip,
    writeback, hold, bypass, ACK, full controller queue and blocked LLC;
  * every PIM-enabled line is reported once as flushed, in set order.
* **`tb_top_scope_relaxed`** runs the top at reduced size in the
  scope-relaxed model, covering the L1 scan on a scope-fence and the
  absence of ACKs.
* **`tb_workload_ycsb`** runs a short-range-scan workload on the full-size
  top: four threads each do 40 rounds of one PIM filter on one of eight 2MB
  scopes followed by three loads, and every loaded line is filled into the
  LLC (a third of them dirty). It keeps its own copy of the LLC contents
  and checks that every operation leaves once, that no load passes an
  un-ACKed older PIM op of its scope, and that exactly the dirty flushed
  lines are written back. It prints the mean scan length (about 15 cycles
  in this run, against more than 2048 for a walk over every set).

To simulate one testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl rtl/pim_pkg.sv tb/tb_pim_consistency_top.sv \
          --top-module tb_pim_consistency_top -o sim && ./obj_dir/sim
```

Verilator finds the other modules in `rtl/` through `-Irtl`. The full-size
top builds in about 15 s and runs in well under a second.

Trust:

* Every module compiles with Verilator lint and with the slang front end.
* The ordering rules are checked only on directed sequences, not proved.
* Performance has not been compared with the published measurements. It
  could not be: they come from a full-system simulation with a PIM module
  that is not part of this RTL.
