# RCP cache hierarchy in SystemVerilog

Speculative loads can leave traces in the cache system, and attacks such as Spectre read secrets back from those traces. A *reversible coherence protocol* (RCP) stops that. A load that is still speculative may read any line, but it must leave every cache and every directory entry as if it had never run, unless it later becomes safe. Then, and only then, its effect is committed.

The protocol extends a two-level MESI protocol with four speculative states (ISpec, SSpec, ESpec, MSpec) and three processor operations:

- `SpecRd` is a load issued while it is still speculative.
- `PrMerge` marks a load that has become safe. Its effect on the caches is made permanent ("merged").
- `PrPurge` marks a load that has been squashed. Its effect is thrown away ("purged").

Five messages support these operations: `GetSpec`, `L1Merge`, `L1Purge`, and the forwarded `FwdGetSpec` and `FwdL1Merge`.

This repository holds synthesizable RTL for the cache side of such a system:

- a private L1 data cache per core;
- a shared L2 bank holding the directory;
- speculative buffers at both levels;
- counting bloom filters;
- a load-resolution sequencer;
- the priority allocator that keeps younger instructions from delaying older ones.

The default configuration is the evaluated multi-core system:

| Item | Default |
|---|---|
| Cores | 4 |
| Load-queue entries per core | 32 |
| L1 data cache | 64 KB, 8-way |
| L2 | one 2 MB, 16-way bank |
| Line size | 64 B |
| ROB size, used for priority tags | 192 |

The out-of-order cores, the on-chip mesh and the DRAM are not part of the RTL. The cores are represented by ports, the mesh is replaced by point-to-point links, and the testbenches contain a memory model.

## The idea in one picture

```
  core c ──cmd──▶ rcp_resolve_seq ──▶ rcp_l1 (+ rcp_spec_buf)  ◀─fwd/ack─┐
  core c ──tags─▶ rcp_prio_alloc                 │ req/resp               │
                                                 ▼                        │
                           rcp_l2: directory + data, per-core rcp_spec_buf + rcp_cbf
                                                 │
                                              memory port
```

A speculative load never changes a cache line's non-speculative state anywhere:

- **L1 hit.** The load copies the line into its specBuf entry, and the line becomes XSpec locally (X = M/E/S). No message is sent.
- **L1 miss, hit in a live specBuf entry of the same line.** The data comes from the specBuf. No message is sent.
- **Miss in both.** The L1 sends `GetSpec`. The handling at the L2 depends on the line's state:

  | Line state at the L2 | What happens |
  |---|---|
  | M or E in another L1 | The L2 forwards the request (`FwdGetSpec`). The owner returns data and keeps M or E. This is the *non-interference* property: the victim of a speculative access sees nothing. |
  | Any other state, or an L2 miss | The L2 or memory returns the data. No L2 block is allocated on a miss. |

  The L1 stores the data in the specBuf only, and the line is ISpec at the requester.

When the load resolves:

- **XSpec with X in the cache.** The line simply returns to X. There is no message, because nothing outside the core changed.
- **ISpec, the load merges.** The L1 sends `L1Merge`. The L2 then treats the line as if the merging core had sent GetS:
  - If another L1 owns the line in M or E, the owner gets `FwdL1Merge`, and both copies end in S.
  - If the merging core was itself the owner, it keeps E or M.
  - Otherwise the merging core gets the line in E.
- **ISpec, the load purges.** The L1 sends `L1Purge`. Only the speculative record is removed.

A store (GetX/Upgrade) invalidates every other copy, speculative ones included. The invalidated loads are reported to the core for replay (the "peekaboo" case under TSO), and their later PrMerge/PrPurge is ignored.

## Speculative state is derived, not stored

Neither cache stores a speculative state.

- **L1.** The tag array holds only the MESI state. A line is speculative while a live (not stale) specBuf entry of that core holds it. The combined state is `{spec, MESI}` (`rcp_pkg::combine`).
- **L2.** The paper's *spec core* counter is computed when needed: it is the number of other cores whose L2 specBuf holds the line. Each core's counting bloom filter is checked first, and that core's specBuf is searched only when its filter answers positive. The check is one combinational step, so it takes the same time whatever the contents.

So XSpec at the L2 is "state X and spec core > 0". The protocol's L2 transitions then follow from the MESI transitions:

| Event | Transition |
|---|---|
| L1Merge with spec core > 0 afterwards | MSpec → SSpec, ESpec/SSpec → SSpec, ISpec → ESpec |
| L1Merge with spec core = 0 afterwards | MSpec → S, ESpec → E or S (by cur_owner), ISpec → E |
| L1Purge | XSpec stays XSpec until spec core reaches 0, then it is X |

This representation has two consequences. Counters can never drift out of step with the buffers. And an invalidation only has to drop specBuf entries.

## Groups of speculative loads to one line

Several loads in a core's load queue may read the same line speculatively. Only the first one that misses sends `GetSpec`. The later loads join its *group* through the specBuf hit path.

Each entry carries three metadata flags:

- **remote:** the group was created by a GetSpec, so the L2 has a matching entry.
- **merged:** an earlier member of the group merged.
- **stale:** the line was invalidated while the load was speculative.

When a member resolves and other live members remain, its entry is freed with no message. A merge also sets the `merged` flag on the remaining members. The last member to resolve acts for the group:

| Last member | Action |
|---|---|
| Group is remote | Sends L1Merge if the member itself merges or any earlier member merged; otherwise sends L1Purge. |
| Group is not remote (created by an L1 hit) | No message. |
| Entry is stale | Ignored. |

At the L2, an `L1Merge`/`L1Purge` finds the core's entry by line address. A GetSpec entry is placed in the lowest free slot of the core's L2 specBuf, because the load-queue index that created the group may be reused before the group resolves.

## Processor-side support

**`rcp_resolve_seq`.** The core announces resolution in bulk:

- `PrMerge(j)`: load j is the youngest load that became safe. All older speculative loads merge with it.
- `PrPurge(j)`: load j is the oldest load that was squashed. All younger loads go with it.

The sequencer walks the load queue, one entry per cycle:

- for `PrMerge(j)`, from the head to j;
- for `PrPurge(j)`, from j to the entry before the tail.

It issues one per-load operation for every entry with a valid L1 specBuf entry and answers the core once, at the end. Rd, Wr and SpecRd pass straight through.

**`rcp_prio_alloc`.** This allocator manages slots of a shared resource such as MSHRs. Each request carries its ROB index as a priority tag, and age is measured from the ROB head modulo the ROB size.

- If all slots are taken and an occupant is younger than the request, the youngest occupant is preempted. Its tag is reported so the core can reschedule it. Otherwise the request stalls.
- A slot is freed only when the ROB reports that its instruction became safe or was squashed.

## Timing

| Path | Cycles |
|---|---|
| L1 hit, request accepted to response (Rd, Wr on E/M, SpecRd hit, SpecRd hit in the specBuf) | 1 |
| L1 miss, L2 hit, at the processor port | 9: the 8-cycle L1–L2 round trip plus the L1 lookup |
| L2 part of that round trip: L1 request presented → L2 response | 7 (1 accept + `LOOKUP_CYCLES`=5 + 1 answer) |
| Memory | whatever the memory port takes; the testbenches use 100 cycles (50 ns at 2 GHz) |
| Bulk PrMerge/PrPurge | up to LQ walk cycles, plus the L1 time of each resolved load |

Reset takes extra cycles. After reset each cache clears its state memory with a sweep of SETS cycles: 128 for the L1, 2048 for the L2. During the sweep it accepts no request.

## Departures from the protocol description

1. **Blocking L2.** The L2 serves one request at a time, with round-robin arbitration over the cores. It finishes each request, including forwards and memory accesses, before taking the next. This serializes every transaction, so the NACKs that the protocol uses during transient states (I→ISpec, ISpec→E/S) are not needed. Each L1 has one outstanding request. An evicted line's Put is acknowledged before its way is reused.
2. **Inclusive L2 with recall.** An L2 victim with L1 copies is recalled. The recalled L1s lose their speculative entries for that line, and the core is told to replay those loads.
3. **Clean S line with no L1 sharers.** The L2 answers GetS (or L1Merge) on such a line with E.
4. **Data always captured.** The specBuf always stores the data and state, including for lines present in the cache. The protocol keeps them only for lines not in the cache. This changes storage, not behaviour.
5. **Replacement.** Both caches use round-robin replacement. A speculative L1 line may be replaced, and its data stays in the specBuf. If its group later merges, the line is re-installed through L1Merge.
6. **Sizes not given by the paper are this design's choices:**
   - bloom filter: 256 counters of 4 bits, 2 XOR-fold hashes, with saturating counters to avoid false negatives;
   - allocator: 8 slots;
   - 32-bit physical addresses;
   - a 64-bit processor data port.
7. **Not modelled:**
   - the remote L2 latency (16 cycles) and the 4×2 mesh;
   - the L1 instruction cache;
   - the three L1 ports: the L1 has one processor port;
   - the core.

## Files

| File | Contents |
|---|---|
| `rtl/rcp_pkg.sv` | types: states, operations, messages, specBuf entry, event record |
| `rtl/rcp_cbf.sv` | counting bloom filter |
| `rtl/rcp_spec_buf.sv` | speculative buffer (one entry per load-queue entry) |
| `rtl/rcp_l1.sv` | L1 data cache and RCP L1 controller |
| `rtl/rcp_l2.sv` | L2 bank, directory, per-core L2 specBufs and filters |
| `rtl/rcp_resolve_seq.sv` | bulk PrMerge/PrPurge sequencer |
| `rtl/rcp_prio_alloc.sv` | priority-tag resource allocator |
| `rtl/rcp_top.sv` | four cores' worth of the above around one L2 |
| `tb/tb_rcp_*.sv` | self-checking testbenches, one per block |
| `tb/tb_rcp_top.sv` | end-to-end test of the top, with small caches so that evictions and recalls are frequent |
| `tb/tb_rcp_top_full.sv` | the same test at the default sizes |

The top exposes, per core:

- the processor port `core_*`, carrying an operation, address, load-queue index, the load-queue head and tail, and store data;
- `spec_inv_*`, which lists speculative loads to replay;
- the allocator ports `ra_*`.

It also has a memory port, statistics event pulses (`l1_ev`, `l2_ev`) and a debug view of the combined state of one line in every cache.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.

The end-to-end test checks every load against a reference memory. It also checks:

- the 1-cycle L1 hit and the 8-cycle L2 round trip;
- non-interference: the owner stays M after another core's GetSpec;
- the state transitions of the scenarios above.

It counts each mechanism and fails if any never occurred:

- SpecRd hits in the L1 and in the specBuf;
- GetSpec served by an owner and by memory;
- local and L2 merges and purges, with spec core 0 and > 0;
- FwdL1Merge;
- invalidation of speculative copies, and resolutions that were ignored;
- L1 evictions and L2 recalls;
- allocator preemption.

A random phase of loads, stores and speculative loads with merges and purges follows.

To simulate a test with Verilator, give the package first:

```
verilator --binary --timing -Wno-fatal rtl/rcp_pkg.sv rtl/rcp_cbf.sv rtl/rcp_spec_buf.sv \
  rtl/rcp_l1.sv rtl/rcp_l2.sv rtl/rcp_resolve_seq.sv rtl/rcp_prio_alloc.sv rtl/rcp_top.sv \
  tb/tb_rcp_top.sv --top-module tb_rcp_top && ./obj_dir/Vtb_rcp_top
```

The block testbenches need only the package, the block and its sub-blocks. For example, `rcp_l2` needs `rcp_spec_buf` and `rcp_cbf`.

The protocol's formal verification (model checking of the state machines) is not reproduced here. The tests are directed and random simulations, so corner cases that involve truly concurrent requests are covered only by the blocking L2's serialization and by the random phase.
