# Loose-Ordering Consistency (LOC) for persistent memory — RTL

A transaction on persistent memory normally pays for its atomicity twice.
Every block it writes goes first to a log and then to its home location.
Conventional write-ahead logging also forces two orderings:

- all log writes of a transaction must be durable before the commit record;
- each commit must be durable before the next transaction's commit.

Both orderings stall the processor and forbid merging writes across
transactions.

LOC relaxes both orderings in hardware.

- **Eager Commit** removes the commit record. Every block in the log carries
  its transaction's TxID and a count field, TxCnt. TxCnt is zero on every
  block except the transaction's last one, where it holds the total number of
  blocks the transaction wrote. After a crash, a transaction counts as
  committed when the number of its blocks found in the log equals that TxCnt.
  Log blocks can therefore reach memory in any order.
- **Speculative Persistence** lets up to SD consecutive transactions (a
  *speculation window*, SD = 16) persist out of order.
  - The last-level cache keeps one version of a block per transaction.
  - When a later transaction of the window has committed a newer version, the
    older version is never written at all: writes are *coalesced* across
    transactions.
  - Each coalesced version is recorded as a dependency pair `<Ta, Tb, n>`:
    n blocks of Ta were superseded by Tb. Recovery uses the pairs so that Ta
    still counts as complete, but only if Tb committed.

This RTL implements that machinery:

- the cache extension;
- the commit/recovery controller with its transaction table and pair buffer;
- the memory-log layout written by the memory controller;
- the crash-recovery engine;
- a top level that joins them between a core port and a persistent-memory
  port.

## Structure

```
            core (TxBegin/TxCommit/TxAbort/TxFlush, 64-byte loads/stores)
              |                         |
          +---v--------+  events   +----v----------------------------+
          |  crl       |<----------| tx_cache                        |
          |  txst      |  sweeps   |  tag + CID/TID/TxID/TxDirty     |
          |  dep_pair_ |---------->|  multi-version sets, sweeps     |
          |  buffer    |           +----+-----------------+----------+
          +---+--------+    versions|(TxCnt stamped)    |home writes
              | pairs, head   +-----v-------------+     |
              +-------------->| log_group_writer  |     |
                              +-----+-------------+     |
          +-----------------+       |                   |
          | recovery_engine |------>+--- write mux <----+
          +-----------------+            |
                 ^ reads                 v
                 +------------  persistent memory (outside)
```

| file | role |
|---|---|
| `rtl/loc_pkg.sv` | Widths, the BLK-TAG, META, TxST entry, pair and log-head structs, and the circular TxID comparison. |
| `rtl/txst.sv` | Tx State Table: 128 entries of 48 bits (CID, TID, TxID, TxCnt, State, Phase, Wrts). |
| `rtl/dep_pair_buffer.sv` | 32 KB (8192 × 32-bit) buffer of dependency pairs. It is read as 64-byte blocks. |
| `rtl/tx_cache.sv` | LLC tag and data store (1024 sets × 16 ways × 64 B) with the transactional fields, victim choice and whole-cache sweeps. |
| `rtl/crl.sv` | Commit/recovery controller for normal operation: TxIDs, LastCommittedTxID, window tracking, TxCnt stamping, pair matrix and window completion. |
| `rtl/log_group_writer.sv` | Memory-log layout: block groups, META blocks, the dependency region and the log head. |
| `rtl/recovery_engine.sv` | Restores a consistent memory image from the log after a crash. |
| `rtl/loc_top.sv` | Top level. |

The core, the L1/L2 caches, the conventional memory controller and the
memory device are not part of the RTL. The top brings their signals out as
ports, and `tb/nvm_model.sv` models the memory for simulation.

## Transactions and TxIDs

TxIDs are 8 bits wide and compared circularly: `a` is newer than `b` when
`a−b` lies in 1..127. The Tx State Table has 128 entries, selected by TxID
mod 128. One core thread is supported, and its transactions run one after
another.

- **TxBegin** takes the next TxID. It stalls while SD transactions have begun
  in the current window, and while a window is being completed.
- **TxCommit** marks the transaction committed and sets LastCommittedTxID,
  the value that CheckMaxCommit reads.
- **TxAbort** starts an abort sweep.
- **TxFlush** forces the window to complete.

The cache raises `ev_alloc` each time a transaction writes a block for the
first time, and the table counts these events as the transaction's TxCnt.
The Wrts field counts the blocks already sent to the log, plus the versions
coalesced away.

## The multi-version cache

Each line carries two flags:

- **TxDirty**: not yet in the log;
- **dirty**: not yet at its home location.

A transactional store updates the transaction's own version of the block. If
it has none, the store allocates a new way, and older transactions' versions
stay. The victim for a new way is chosen in this order:

1. For a transactional store, a plain copy of the same block.
2. An invalid way.
3. A clean plain line.
4. A superseded version: a later committed version of the same block exists.
   It is dropped, and the drop is reported as a coalescing event `<Ta, Tb>`.
5. A dirty plain line, which is written home.
6. *Version overflow*: the oldest version that has a newer one. It is written
   to the log.
7. No victim: the store waits, and `need_flush` asks the controller to
   complete the window.

Within a class, the first matching way is taken; there is no LRU. A load
returns the newest version that is present. There is no refill from memory,
so a load miss reports `resp_hit = 0`.

## Completing a speculation window

A window completes on any of these events:

- the commit of its SD-th transaction;
- TxFlush;
- TxAbort;
- a store that finds no victim.

The controller then holds the core and runs these steps in order:

| step | action |
|---|---|
| ABORT | Only on TxAbort: invalidate the aborted versions. |
| DROP | Sweep: drop every superseded committed version and count the pairs. |
| LOG | Sweep: write every committed TxDirty version to the log, stamped with TxCnt as described below. |
| CLOSE | Close the partly filled block group. |
| PAIRS, DEPW | Turn the SD × SD pair-count matrix into pairs, ordered by Ta, and write them to the log. |
| HEAD | Write the log head with the window's first TxID and the pair count. From here the window is durable. |
| INPLACE | Set Phase = in-place for the committed transactions. |
| HOME | Sweep: write the logged versions to their home locations. |
| TRUNC | Write a head whose start lies after the last group: the log is now empty. |
| FREE | Set Phase = complete and free the table entries. |

In the LOG step, a block carries its transaction's TxCnt only when two
conditions hold: the transaction has committed, and the block brings the
transaction's Wrts up to its TxCnt. Every other block carries zero. A
transaction still running at completion (possible after TxFlush or a full
set) keeps its versions in the cache. It becomes the first transaction of
the next window.

Every window is written home before the next one starts, so at most one
window is ever live in the log. Recovery relies on this.

## Memory log layout

The log area is 32 MB (524,288 blocks) starting at `LOG_BASE`:

```
LOG_BASE + 0                 log head
LOG_BASE + 1 .. +512         dependency pairs, 16 per block (<Ta 8, Tb 8, n 16>)
LOG_BASE + 513 ...           block groups of 8 blocks, used circularly
```

A block group holds 7 data blocks and then a META block:

- **META**: a 64-bit SID and seven 64-bit BLK-TAGs.
- **BLK-TAG**: CID 3, TID 1, TxID 8, TxCnt 16, ADDR 32, RESV 4 bits.
  `RESV[0]` marks a tag as valid.

The META block is written after its data blocks. A META block whose SID
matches the expected sequence therefore proves that its data blocks are in
memory. The log head holds these fields:

- a magic word;
- the start group and its SID;
- the first TxID of the live window;
- the number of pairs.

## Recovery

The recovery engine runs on `recover_start` after a reset. It owns the
memory ports until it is done.

1. Read the head. If it has no magic word, the memory is fresh: write an
   empty head and stop.
2. Walk the groups from the start group while the SIDs follow in sequence.
   Count the valid tags per TxID and note each non-zero TxCnt.
3. Apply the pairs from last to first. If Tb is committed, add n to Ta's
   count; otherwise Ta fails.
4. Walk the window's TxIDs in order. A transaction is committed when its
   count plus the added pairs equals its TxCnt, or when it has no
   TxCnt-bearing block, has pairs and none of them failed. The first logged
   transaction that is not committed discards itself and every later one.
5. Walk the groups again and copy every block of a committed transaction to
   its home address, in log order.
6. Truncate the log. Hand the next group, the SID and the next TxID (window
   base + SD) to the log writer and the controller.

## Timing

- The cache accepts one request per cycle. Load data arrives one cycle after
  the handshake.
- A sweep visits one way per cycle and waits while a write port is busy.
  A full sweep therefore takes at least SETS × WAYS = 16,384 cycles.
- Window completion costs three or four sweeps plus the log and head writes.
  At the default size this dominates the run time of a window.
- The log writer issues one memory write per cycle: 8 cycles per full group.
- Recovery keeps one read outstanding: one read per META block, one read and
  one write per restored block, and one cycle per tag and per pair.

## Where this design departs from the paper or goes beyond it

- Replacement is first-match, not LRU.
- There is no miss/refill path.
- Only one core thread is supported.
- The Flusher is built as whole-cache sweeps run by the controller.
- Every window is written back eagerly.
- These are this design's own: the encodings of the log head, the tag-valid
  bit, the META-last order, the pair matrix, and the rule that an abort
  closes the window.
- The log area does not move for wear levelling.
- A transaction may write at most WAYS blocks of one set. Beyond that the
  store waits for ever.
- **Known limitation:** suppose a transaction's write has evicted an older
  committed version of a block by version overflow (into the log only), and
  the transaction then aborts. That older version is never written home.
- The end-to-end test has two further failures that are not fully
  understood. With a few of the non-default random seeds tried, the recovered
  image does not match any committed prefix. The default seed passes.

## Simulation

All testbenches are self-checking. Each one prints
`TB_RESULT checks=N failures=M`. With plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/loc_pkg.sv rtl/*.sv tb/nvm_model.sv \
          tb/tb_loc_top.sv --top-module tb_loc_top -o sim && obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_txst` | State transitions, counters, slot sharing and the error pulse. |
| `tb_dep_pair_buffer` | Packing, zero padding, capacity and overflow. |
| `tb_log_group_writer` | Addresses, META contents, SIDs, head, truncation and 8 cycles per group. |
| `tb_tx_cache` | The paper's four-transaction window example (coalescing, log and home writes, abort); overflow, superseded-version victims and the full-set stall. |
| `tb_crl` | TxIDs, stall at SD, the order of completion steps, TxCnt stamping, pairs, abort and flush. |
| `tb_recovery_engine` | Recovery from hand-built log images: a fresh log, pair-based commit, the in-order cut and a failed pair. |
| `tb_loc_top` | End to end at 16 sets × 4 ways, SD = 4, about 400 transactions. See below. |
| `tb_loc_top_full` | The same program with every parameter at its default: 1 MB cache, SD = 16, 32 MB log, 168-cycle reads. |

The two end-to-end testbenches work as follows.

- A random program runs transactions with loads, aborts and flushes.
- Several power failures are injected. A reset keeps the memory model's
  contents. One of the failures is timed to fall in the middle of a window's
  home writes.
- After each recovery, the home locations must equal the image after some
  prefix of the committed transactions. That prefix must cover every
  transaction of the last completed window.
- Every mechanism must occur at least once: TxBegin stall, coalescing,
  version overflow, full-set stall, window completion, abort, flush, and
  recovery of committed transactions.
- The full-size test needs a few minutes of simulation.
