# Hercules: atomic durability from a persistent CPU cache

With eADR, the CPU caches are inside the power-fail protected domain, so
everything that has reached the cache will survive a power failure. That
makes a modified cache line a ready-made *redo log copy* of its home data
in persistent memory (pmem), as long as two conditions hold:

- it must not overwrite its home address before its transaction commits;
- it must be identifiable after a crash.

Hercules adds the bookkeeping that makes those two conditions hold. This
gives transactions that are atomic and durable at almost the cost of plain
cached stores:

* Every cache set carries a few **TransTags**. A TransTag says that way W
  of the set belongs to transaction TxID and is still uncommitted
  (`TxState = 1`).
* A transaction **commits on chip**. One durable write of the transaction
  length (`TxLen`) to a per-transaction profile is the commit point. After
  it, a small circuit clears the `TxState` of all the transaction's lines
  in a fixed 10 cycles. Those lines become ordinary dirty lines and reach
  home later through normal write-backs (or the eADR flush).
* A transactional line that must leave the cache before its commit is
  **flushed prematurely**. The memory controller redirects it into a log
  entry in a reserved *log zone* of pmem, and an *extended WPQ* (eWPQ)
  entry remembers where it went. At commit the eWPQ entries are committed
  **off chip** (TxState cleared). A periodic **migration** then copies
  committed log entries to their home addresses.
* On **power failure**, uncommitted lines are written to an emergency area
  together with their metadata, and so is the controller state (LogHead,
  LogTail, eWPQ). A recovery pass can then:
  - replay every transaction whose `TxLen` is non-zero;
  - discard every other transaction.

This repository holds synthesizable SystemVerilog for one core's path
through this scheme:
- transaction registers and primitives;
- three cache levels with TransTags;
- the memory controller with WPQ, eWPQ, log zone management, migration,
  garbage collection and the power-off dump;
- the power-off sequencer;
- the recovery engine that runs after a crash.

It also has self-checking testbenches for each of them.

## Transactions and their registers (`tx_ctrl`)

A transaction is the code between `tx_start` and `tx_commit` (or
`tx_abort`). The core holds two registers:
- `PerCoreTxID`: the running transaction's 21-bit ID, taken from the
  shared, ever-increasing `GlobalTxID`;
- `PerCoreTxLen`: the number of distinct cache lines the transaction has
  written so far.

The L1D pulses `line_new` whenever a transactional store covers a line
that was not yet part of the transaction. That pulse increments
`PerCoreTxLen`. Both registers can be saved and reloaded on a context
switch (`ctx_*`).

| primitive | effect |
|---|---|
| start  | TxID <- GlobalTxID++, length <- 0; TxLen[TxID] = 0 is written to the profiles |
| commit | TxLen[TxID] = PerCoreTxLen is written (the commit point); then a *state reset* (commit, TxID) is broadcast to L1D, L2, L3 and the eWPQ; done when all four answer |
| abort  | a state reset (abort, TxID) is broadcast; TxLen stays 0 |

The TxLen write counts as durable as soon as it is in the memory
controller's write pending queue (WPQ), because the WPQ is inside the ADR
domain. A commit at full size therefore takes about 18 cycles:
- a few cycles to post the TxLen write;
- 10 cycles of state reset;
- a few cycles of handshakes.

Writing TxLen *before* clearing the TxStates is deliberate. A crash
between the two steps still leaves a consistent picture, because recovery
treats a non-zero TxLen as committed and replays the remaining
uncommitted-looking lines.

## TransTags and the cache levels (`transtag_array`, `hercules_cache`)

A TransTag is `{valid, WayNo[3:0], TxID[20:0], TxState}`. Each set has
`NTT` of them. The *TransTag ratio* is NTT/ways:

| level | geometry | TransTags/set | ratio | hit latency |
|---|---|---|---|---|
| L1D | 32 KB, 4-way, 128 sets | 4 | 100 % | 2 |
| L2  | 256 KB, 8-way, 512 sets | 4 | 50 % | 8 |
| L3  | 16 MB, 16-way, 16,384 sets | 4 | 25 % | 30 |

The **state reset circuit** in `transtag_array` walks all sets in
`RESET_CYCLES` (10) cycles. It does this by handling
`ceil(SETS/10)` sets in parallel per cycle: 13 sets at L1D and 1,639 at
the LLC. On a commit it clears `TxState` in every TransTag of that TxID,
and the TransTag stays valid so it can be reused. On an abort it
invalidates those TransTags and reports, per lane, the ways whose lines
the cache must drop (`kill_*`), because aborted data must vanish. The
array is kept in flip-flops, since the reset touches many sets per cycle.

`hercules_cache` is a blocking, write-back, write-allocate cache. It
applies these rules:

* **Store inside a transaction.**
  - A line that is clean, or already owned by this transaction, just takes
    (or keeps) a TransTag.
  - A line that is dirty but not transactional is first written to the
    next level, so the last committed version is safe below. Only then
    does the transaction take it.
* **Replacement.**
  - A non-transactional line only replaces non-transactional ones.
  - A transactional line takes a free TransTag, or reuses a committed one,
    and evicts a non-transactional victim.
  - When all TransTags of the set hold uncommitted lines, one of those
    lines is evicted. It keeps its TxID and TxState on the way down, so
    the level below, and finally the memory controller, keeps it away from
    home.
  - Within the allowed ways the choice is round-robin, invalid ways first.
* **Exclusion.** L2 and L3 (`UPPER_CACHE = 1`) hand a transactional line
  to the level above when it is read by its owner, and drop their own
  copy. A transactional line thus lives in exactly one place.
* **Isolation (read committed).**
  - A transactional access to another transaction's uncommitted line
    answers `conflict`; the core is expected to abort.
  - A plain (non-transactional) read of such a line is served from the
    level below. That level holds the last committed copy. This is the
    *bypass*.
  - The bypassed copy comes back marked `nocache`, and no level above
    allocates it. A kept copy would turn stale when the owner commits.
  - A plain store that meets such a line lower down gets `conflict`.
* **Power-off flush.** The cache walks every way:
  - uncommitted lines go down as `OP_EMERG`;
  - other dirty lines go down as ordinary write-backs;
  - with `fwd` set, the level only passes requests from above. This lets
    the sequencer flush L3 first while L1D and L2 wait.

Every link uses the same request format (`mreq_t`: op, line address,
data, word index, tx, TxID, TxState, dirty) and response (`mrsp_t`: data,
tx, TxID, TxState, dirty, conflict, nocache). A valid/ready handshake carries the
request, and every request, writes included, gets exactly one response
pulse. Hit latency counts from acceptance to the response pulse.

## The memory controller (`hercules_mc`, `wpq`, `ewpq`)

### Log zone map (line addresses, top 256 MB of a 512 GB pmem)

| area | base | content |
|---|---|---|
| transaction profiles | `LZ_BASE` | TxLen of each TxID, 32 bits each, 16 per line |
| log metadata | `+2^17` | 8 bytes per log entry: valid, TxState, TxID, 33-bit home line address |
| log data | `+2^17+2^18` | one line per log entry, 2^21 entries |
| eWPQ extension | after the log data | 8-byte eWPQ entries dumped from the chip |
| emergency area | after the extension | header (LogHead, LogTail, extension count, shutdown flag, number of emergency lines), validity bitmap, the whole eWPQ, then metadata and data of emergency lines |

LogHead and LogTail bound the live window of the log, which is a ring of
2^21 entries.

### eWPQ

The eWPQ has 512 fully associative 64-bit entries:
`{TxState, TxID[20:0], home[20:0], log index[20:0]}`. The bitmap and the
LRU stamps sit beside them.
- The home address is kept only as its low 21 bits.
- A hit is confirmed against the full address stored in the log
  metadata.
- If the full address does not match (an alias), the search is repeated
  with that entry masked off.

### Requests from L3

* **Write-back of a committed or plain line.** Written home through the
  WPQ (64 entries, FIFO).
* **Write-back of an uncommitted line (premature flush).** The controller:
  1. takes a free eWPQ entry; if none is free, it first dumps the LRU
     entry to the extension area;
  2. takes log index = LogHead;
  3. writes the metadata and data of the log entry;
  4. advances LogHead.
* **Read.**
  1. The eWPQ is searched, which takes 10 cycles.
  2. If nothing is found there and the extension area holds entries, the
     extension area is scanned.
  3. What happens next depends on what was found:
     - the reader's own uncommitted line, or a committed one: the line is
       read from its log entry, returned with its transactional state, and
       the entry is released;
     - another transaction's uncommitted line, for a transactional reader:
       the response carries `conflict`;
     - that same line, for a plain reader: the home copy is returned, marked `nocache`;
     - nothing: the home copy is returned.
* **`OP_EMERG`** (power-off only). The line and its metadata go to the
  emergency area.

### Background work, when the controller is idle

* **State reset.** Commit clears TxState in the matching eWPQ entries
  (off-chip commit). Abort invalidates them. If entries have been spilled
  to the extension area, the controller then reads it line by line and
  rewrites each line that holds the transaction. Commit clears TxState
  and abort removes the entry. No request is taken during that scan.
* **Migration.** Every `MIG_PERIOD` cycles, committed eWPQ entries are
  copied from their log entry to home and released.
* **Garbage collection.** It runs when LogHead - LogTail exceeds
  `GC_THRESH` (2^20).
  1. Up to `GC_CHUNK` (32) log entries at LogTail are examined.
  2. Each one still referenced by the eWPQ is copied to LogHead. Its eWPQ
     entry is repointed, and only then does LogHead advance.
  3. LogTail slides past the chunk to the next live entry.

  This order keeps the log consistent if power fails in the middle.

Reads are issued to pmem only when the WPQ is empty, so a read can never
overtake a queued write to the same line.

## Power failure (`crash_seq`)

On `power_fail` the sequencer runs these steps:

1. It asks the memory controller to save the following to the emergency
   header:
   - LogHead and LogTail;
   - the extension count;
   - the eWPQ bitmap and all eWPQ entries.
2. It flushes L3, then L2, then L1D. While one level flushes, the levels
   below it forward.
3. It lets the controller write the shutdown flag and the number of
   emergency lines, and drain the WPQ.

The flag is 1 only if no uncommitted line had to be saved. In that case
no recovery is needed.

## Recovery (`hercules_recovery`)

When power returns, and before the machine runs anything, a pulse on
`recover_start` runs the recovery engine. While it is busy it owns the
pmem port. It makes two passes over the saved image, and each pass visits
three sets of saved items in order:

1. the eWPQ entries whose bit is set in the saved bitmap;
2. the live extension-area entries;
3. the emergency lines.

**Pass 1 moves data.** For each item the engine reads the owner's TxLen
from the profiles, then:
- a line whose transaction has a non-zero TxLen (it committed) is copied
  to its home address;
- so is a log entry already committed off chip (TxState 0) but not yet
  migrated;
- everything else belongs to an unfinished transaction and is dropped.

Log entries are replayed before emergency lines. An emergency line came
straight out of a cache, so it is the newest copy of its address.

**Pass 2 closes the replayed transactions.** It writes their TxLens back
to zero. This happens only after every line is home, so a second power
failure during recovery just means recovery runs again.

**Finally** the header is rewritten to "clean shutdown, no emergency
lines, no extension entries" and the saved bitmap is cleared. The
controller restarts with an empty eWPQ and an empty log.

## Parameters

All defaults are the evaluated machine's numbers:

| parameter | default | meaning |
|---|---|---|
| `L1_SETS/WAYS/NTT/LAT` | 128/4/4/2 | L1D geometry, TransTags, hit latency |
| `L2_SETS/WAYS/NTT/LAT` | 512/8/4/8 | L2 |
| `L3_SETS/WAYS/NTT/LAT` | 16384/16/4/30 | LLC |
| `RESET_CYC` | 10 | state reset latency |
| `EWPQ_N`, `EXT_N` | 512, 5120 | eWPQ entries, extension area (10x) |
| `WPQ_DEPTH` | 64 | write pending queue |
| `EWPQ_LAT` | 10 | eWPQ search latency |
| `MIG_PERIOD` | 3,000,000 | migration interval (cycles) |
| `GC_THRESH`, `GC_CHUNK` | 2^20, 32 | GC trigger and chunk |

The pmem model `tb/pmem_model.sv` has defaults of 450 and 300 cycles
(150/100 ns at 3 GHz). It serves one request at a time.

## Where this RTL departs from the published design

* **One core.** The 8-core machine with a shared LLC, its joint TransTags
  and coherence between cores is not built. The LLC here is private.
* **L1D size.** The L1D is 32 KB. The published estimate charges Hercules
  with a 30 KB L1D to pay for the TransTags. 32 KB keeps the set count a
  power of two.
* **WayNo width.** WayNo is 4 bits at every level, rather than log2(ways).
  This lets one TransTag format serve the 16-way LLC.
* **Extension area.** Its entries are searched by a linear scan.
  Migration and GC do not process them, so a committed line dumped there
  goes home only when it is read back or at recovery. Its log entry is
  not protected from GC either. Log extension through indirect indexes is
  not built, and when the log ring or the extension area is full, `err`
  is raised.
* **GC scope.** GC moves every live entry of a chunk, committed ones
  included. The prose says only uncommitted entries are moved, but
  committed entries that have not been migrated yet must survive too. The
  garbage-collection figure says to move valid entries.
* **Search order.** The eWPQ search happens before the home read, not in
  parallel with it.
* **Migration period.** It is counted in cycles, not instructions.
* **Recovery details.** The paper says what recovery must decide, not
  how. The scan order, the replay of committed-but-unmigrated log entries
  and the extension area, and the empty log after recovery are this
  design's own choices.
* **Replacement and timing.** The victim order and the exact cycle counts
  beyond the stated latencies are this design's own choices. So are
  blocking caches, one request in flight per level, and the reset taking
  RESET_CYCLES + 2 cycles at a cache port (one cycle to accept, one for
  the registered done).

## Size and tool notes

At the defaults the LLC alone holds about 1.8 Mbit of TransTags and
0.6 Mbit of valid, dirty and round-robin bits in flip-flops. Its data
array is 128 Mbit, written as an array. Verilator builds and simulates the
full-size top in seconds. Yosys' coarse synthesis of the full-size top
takes longer than ten minutes, while each block synthesizes at its own
defaults.

The top is `hercules_top`. Its ports are:
- the core port;
- the transaction primitives;
- the context-switch inputs;
- `power_fail`;
- the recovery controls (`recover_start`, busy, done, clean flag, counts
  of replayed and discarded lines);
- a pmem port, shared by the controller and the recovery engine;
- status outputs;
- an event vector: transactional evictions per level, bypass, conflict,
  premature flush, eWPQ hit, migration, extension dump and hit, GC move,
  and new transactional line.

## Testbenches

Every `tb/tb_*.sv` is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. Build one with, for
example:

    verilator --binary --timing --assert -Irtl -Itb rtl/hercules_pkg.sv rtl/*.sv \
        tb/pmem_model.sv tb/tb_hercules_top.sv --top-module tb_hercules_top
    ./obj_dir/Vtb_hercules_top

| testbench | what it checks |
|---|---|
| `tb_transtag_array` | commit/abort walk and its 10-cycle latency, kill masks, unrelated TxIDs untouched |
| `tb_tx_ctrl` | TxID allocation, TxLen at start and commit, ordering of TxLen write before reset, refusals, context switch |
| `tb_wpq` | FIFO order and level against a reference queue under random traffic |
| `tb_ewpq` | insert, search with alias skipping, LRU, commit/abort, GC repointing |
| `tb_hercules_cache` | hit latency, clean-before-transactional-write, conflict, bypass, transactional eviction, commit/abort latency, flush |
| `tb_hercules_mc` | TxLen writes, premature flush layout, own/other/plain reads, 10-cycle eWPQ search, alias skip, off-chip commit and migration, abort, extension dump and hit, commit of an extension entry, GC moves, power-off dump layout |
| `tb_crash_seq` | flush order and forwarding |
| `tb_hercules_recovery` | replay and discard decisions on a hand-built crash image, emergency copy winning over the log copy, TxLens reset, header and bitmap cleared, second run on the clean image |
| `tb_hercules_top` | end to end at reduced sizes, with five transactions, a power failure, recovery and a restart. Every mechanism is counted and must occur. After recovery every committed value must be at home |
| `tb_hercules_top_full` | the top at full size: one transaction, L1D hit latency 2, pmem miss at least 450 cycles, commit about 18 cycles, committed data visible |

## Capacity against the evaluated workloads

One core's TransTags cover 512 + 2,048 + 65,536 lines, plus 512 eWPQ
entries and 5,120 extension entries.
- The micro-benchmark transactions are at most 1,021 lines (typically
  6-51), so they fit, mostly inside L1D.
- Artificial transactions of up to 60k lines fit at full cache size.
- On the 8x shrunk cache hierarchy used for the stress tests they do not
  fit: about 14,000 lines can be tracked there. Those tests rely on an
  unlimited eWPQ and on log extension, which are not built here.
