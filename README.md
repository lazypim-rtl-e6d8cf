# LazyPIM coherence in SystemVerilog

Processing-in-memory (PIM) cores sit in the logic layer of a 3D-stacked memory
and share data with a multicore processor on another chip. Keeping their
caches coherent line by line would send a coherence message off-chip for
almost every PIM access. LazyPIM avoids that with speculation. A PIM core runs
its kernel without asking anyone, and it records compactly (in Bloom-filter
signatures) which lines it read and wrote. At the end of a stretch of work
(a *partial kernel*) it sends those signatures to the processor in one
message. The processor intersects them with a signature of its own writes:
- If the PIM core read nothing the processor wrote in the meantime, the
  PIM core's writes become visible (commit).
- Otherwise the processor flushes the lines involved and the PIM core
  throws its work away and re-runs it (rollback).

This RTL implements the coherence hardware for 16 PIM cores and the processor
side that checks and resolves their kernels. It does not implement the cores,
caches and memory around them; those connect through ports.

## Signatures

A signature is an N = 2048-bit parallel Bloom filter in M = 4 segments of 512
bits. To insert a 42-bit line address, each segment sets one bit chosen by
its own H3 hash, an XOR of fixed 9-bit rows for the address bits that are set.
An address is "in" the signature when its bit is set in all four segments, so
there are false positives but never false negatives. Two signatures share an
address only if every segment of their AND is non-empty.

- **Hash rows.** `lazypim_pkg::h3_row` defines row (s, i) as the low 9 bits
  of the splitmix64 finaliser of 64·s + i + 1. This is one fixed choice of
  H3 matrix. At 250 addresses it gives about 1.8 % false positives in the
  unit test.
- **`bloom_signature`** holds one signature and counts the distinct
  addresses inserted. An address that is already present does not count.
  `full` rises at 250 addresses, the limit that ends a partial kernel.
- **`cpu_write_set`** holds 16 signature registers. Inserts go to the
  registers in turn (round robin), so more addresses fit before the false
  positive rate climbs.
- **`sig_intersect`** ANDs one PIM signature with all 16 registers at once,
  in one combinational cycle.

## One partial kernel, from the PIM core's side (`pim_lazy_ctrl`)

1. **Run.** At launch, and after each commit, the controller checkpoints the
   core (`core_checkpoint`). The L1 (`pim_l1_cache`) returns every load
   response and store response. The controller inserts each response's line
   into the PIMReadSet (loads) or the PIMWriteSet (stores).
2. **Stop.** `partial_kernel_ctrl` stops the kernel on the first of:
   - either signature reaching 250 addresses;
   - 1,000,000 retired instructions;
   - a store that would have to evict a speculative line (all 4 ways of its
     set are speculative);
   - a synchronization primitive;
   - kernel end.

   `stop_cause` shows which one.
3. **Wait for sources.** The core waits until every core whose speculative
   data it read is waiting too. Those cores are the speculative read bits
   `rb`, which the PIM directory reports on `spec_read_src`.
4. **Send.** The core sends PIMReadSet, PIMWriteSet and `rb` over
   `sig_link`.
5. **Answer.**
   - **Commit:** the L1 writes every speculative line back to its vault, one
     per accepted memory request. The core then acknowledges and continues.
   - **Rollback:** the L1 invalidates every line in one cycle and the core
     restarts from the checkpoint (`core_restore`).

If a core this one read from is rolled back, this core is *squashed*. While
it is still running it rolls back at once. If it is already waiting, its
pending message is marked so that the processor rolls it back.

The L1 keeps a speculative bit per line and a per-word (64-bit) dirty mask.
The mask is what makes a write-after-write merge possible. When the processor
and the PIM core both wrote a line, the processor's copy is sent to the L1,
which takes only the words the PIM core did not write.

## Resolution, from the processor's side (`cpu_conflict_ctrl`)

The processor handles one **group** at a time. A group is a waiting core plus
every core whose speculative data it read. A group is started only when all
its members' messages have arrived, and groups with sharing go first.

1. **Check** the members, one per cycle (16 cycles).
   - Conflict: PIMReadSet ∩ CPUWriteSet is non-empty, or the member was
     squashed.
   - WAW candidate: PIMWriteSet ∩ CPUWriteSet is non-empty.
2. **Lock** the PIM data region (`region_lock`). Then walk the processor
   cache tag store once: the cache shows one PIM-region line per cycle and
   the block answers combinationally.
   - **Conflict:** flush every dirty line that is in a member's PIMReadSet,
     then send rollback.
   - **No conflict:** for every line in a member's PIMWriteSet:
     - dirty: merge it into that core's L1, then invalidate it;
     - clean: only invalidate it.

     Then send commit and wait for every member's acknowledgement. Commit is
     only final once the speculative lines are in memory.
3. **Refill CPUWriteSet.** Erase it, then rescan the tag store. The next
   partial kernel must see both the processor's new writes and the dirty
   lines already in its caches.

While the region is locked, a processor write to a line in the group's
signatures stalls. Other writes proceed.

**Forward progress.** A core that is rolled back three times in a row gets its
PIMReadSet kept as a lock. A processor write to any line in a locked read
set stalls until that core commits, so the fourth attempt cannot lose to the
processor again.

**Sharing bookkeeping.** Two details keep groups from deadlocking:
- Once a core has been resolved, any pending message that still names it as
  a source no longer waits for it. Those source bits are stale.
- A core is not resolved alone while a core that read its data has a message
  on its way (`src_hold`, formed in the top level).

## PIM-DBI (`pim_dbi`)

PIM-DBI is a dirty-block index for the processor's PIM-region lines. It has
16 rows, each a 48-bit tag and a 64-bit dirty vector, so it covers 1024 lines
in 224 bytes.
- **Mark and clean.** Processor writes mark lines; write-backs and flushes
  clear them.
- **Periodic write-back.** Every 800,000 cycles it hands every marked line
  to the cache for write-back. Fewer dirty lines then sit in the caches when
  a kernel starts, and dirty lines are what make the CPUWriteSet fill up and
  trigger conflicts.
- **Row eviction.** When a 17th row is needed, one row is written back
  (chosen round robin) while the write stalls.

## Sizes and timing

| Item | Value | From |
|---|---|---|
| PIM cores | 16 | paper (4–16) |
| Signature | 2048 bits, M = 4 | paper |
| CPUWriteSet | 16 registers | paper |
| Address limit per signature | 250 | paper |
| Instruction limit | 1,000,000 | paper |
| Rollbacks before lock | 3 | paper |
| PIM L1 | 64 kB, 4-way, 64 B lines (256 sets) | paper |
| PIM-DBI | 16 × 64 blocks, 48-bit tag, 800K-cycle interval | paper |
| Physical address | 48 bits (42-bit line address) | own choice |
| Word for dirty masks | 64 bits | own choice |
| Signature link | 64 bits per cycle, 65 beats per message | own choice |
| Message latency | accepted in cycle t, buffered from t + 66 | own choice |
| Group check | 16 cycles | own choice |
| L1 refill | request, then the cycle after the vault answers; the request is then a hit | own choice |

## Where this departs from, or goes beyond, the paper

- **Rollback clears the whole PIM L1**, including clean lines, so no stale
  copy survives a conflict.
- **The processor keeps 16 received signature messages.** The paper gives
  8 KB of processor-side storage but also 16 CPUWriteSet registers (4 KB);
  the difference is read here as the receive buffers.
- **Merge of a line the PIM core does not hold speculatively.** The
  processor's copy goes straight to memory.
- **The tag-store walk is an interface, not a model of a real cache.**
  The walk (`walk_*`/`act_*`) and the group rules above are this design's.
- **Stale source bits are cleared only when a core's own message is
  released.** A message that a core sends after a source was resolved, and
  that names that source again from a new read, does not wait for it.
- **Not built:** the processor cores and caches, the main and PIM
  directories, the PIM cores, the vaults and DRAM, the off-chip SerDes, and
  the page-table flag for PIM data. The top exposes their connections as
  ports.

## Files

`rtl/lazypim_pkg.sv` holds the shared constants, types and the hash rows.
`rtl/lazypim_top.sv` instantiates, per PIM core, one `pim_l1_cache` and one
`pim_lazy_ctrl` (which contains both signatures and `partial_kernel_ctrl`).
At the processor it instantiates `sig_link`, `cpu_conflict_ctrl` (which
contains `cpu_write_set`, `sig_intersect` and `h3_hash`) and `pim_dbi`.

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each prints
`TB_RESULT checks=N failures=F`. `tb/tb_ref_pkg.sv` recomputes the hash
independently of the RTL.

`tb_lazypim_top` runs the whole design at its default sizes. It models the
PIM cores, the vaults, the processor cache and the PIM directory, and walks
through these scenarios:
- a kernel that reads C and A and writes B, while the processor writes A
  before the kernel and C during it: conflict, flush, rollback, re-run,
  then a word-by-word WAW merge on B;
- a read set filling up;
- a speculative eviction;
- the instruction cap;
- a synchronization primitive;
- a group commit of two sharing cores;
- a squash;
- a read-set lock with a stalled processor write;
- PIM-DBI row eviction and its periodic trigger.

It counts every mechanism and fails if one never happens. It runs about
1,000,000 cycles, roughly 40 s.

To run a testbench with verilator:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
      -Irtl -Itb -y rtl -y tb +libext+.sv --top-module tb_lazypim_top \
      rtl/lazypim_pkg.sv tb/tb_ref_pkg.sv tb/tb_lazypim_top.sv
    ./obj_dir/Vtb_lazypim_top +verilator+rand+reset+2

## Limits of trust

- The unit testbenches check each block against independent models.
- The end-to-end test covers each mechanism at least once. It does not
  cover random interleavings of many cores.
- No workload from the evaluation (Ligra graph kernels, HTAP database
  queries) has been run: the cores that would run them are not part of the
  RTL.
- Synthesis of the full 16-core top level with 1 MB of L1 arrays takes
  longer than ten minutes in yosys. The blocks synthesize on their own.
