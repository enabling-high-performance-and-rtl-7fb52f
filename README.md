# Keeping an in-memory analytical replica fresh: vault logic for an HTAP database

A hybrid transactional/analytical (HTAP) database serves short update transactions
and long analytical scans over the same data. This design keeps two replicas:

- a row-oriented replica, which the transactional engine updates on the host CPUs;
- a column-oriented, dictionary-encoded replica, which analytical queries read.

The analytical replica lives inside a 3D-stacked memory cube, and small cores in the
cube's logic layer run the queries. Two costs make this hard:

- **Propagating updates.** Every update has to reach the analytical replica, and
  there it has to be re-encoded into a column.
- **Isolating the queries.** Queries must see a consistent version of the data while
  those updates land.

Doing either job in software on the small in-memory cores would steal their time and
memory bandwidth. This RTL puts both jobs into fixed-function logic placed next to
each memory vault (one of the cube's 16 independent memory partitions):

- an **update gathering and shipping unit**: a merge tree, a hash-index walker and a
  reorder buffer;
- an **update application unit**: a bitonic sorter, a dictionary merger and parallel
  code re-mappers;
- a **snapshot manager**: lazy, shared, column-granularity snapshots;
- a **copy unit** shared by all of them, which keeps many memory reads in flight and
  writes each word back as soon as its read returns.

`polynesia_vault` is the top module of one vault. The host CPUs, the in-memory cores,
the DRAM, the vault controller and the vault-to-vault network are outside it. The
signals that would connect to them are the top module's ports.

All code is SystemVerilog-2017 and synthesizable, except `tb/`. Types shared between
modules are in `rtl/polynesia_pkg.sv`.

## 1. Data formats

| Item | Layout | Notes |
|---|---|---|
| Update log entry (`log_entry_t`, 114 bits) | `{commit_id[32], typ[2], data[32], col[16], row[32]}` | `typ` is INSERT, DELETE or MODIFY. `(col,row)` is the key that locates the update in the analytical replica. |
| Memory word | 128 bits, word-addressed | |
| Hash index node (`hash_node_t`) | `{valid, col, row, target, next}` | One node per memory word. `target` is the column buffer address. `next` is the next node of the chain, and 0 ends the chain. |
| Hash bucket `b` | Node at `hash_base + b` | `b = {col,row} mod NUM_BUCKETS`. |
| Column (update application) | Stream of 4 codes per beat | A code is the position of the value in the column's sorted dictionary. It is `ceil(log2(dict size))` bits wide, at least 1. |

## 2. Update gathering and shipping (`update_shipping_unit`)

Each transactional thread writes its own update log, already sorted by commit ID. The
unit has to deliver every update to the per-column buffer it belongs to, in global
commit order, because a later update of a row must win. This happens in three stages.

### Stage 1: merge (`merge_unit`)

- Eight input FIFOs of 128 entries each receive the streamed thread logs.
- A 3-level comparator tree over the eight FIFO heads picks the smallest commit ID and
  pushes it into the final log, a 1024-entry FIFO. This takes one entry per cycle.
- An entry leaves only when every unfinished log has a head in its FIFO. Without this
  rule, a later entry could overtake an earlier one that has not arrived yet.
- Ties go to the lower log index.
- The testbench checks the rate: 1000 entries in at most 1004 cycles.

### Batching (`update_shipping_unit`)

- Shipping starts when the final log holds 1024 entries.
- It also starts when every thread has signalled `log_done` and the final log is not
  empty. This flush is this design's own addition, so the tail of a run is not left
  behind.
- The batch size is latched when the batch starts. Merging continues behind the batch.
- `batch_done` pulses when the last entry of the batch has retired.

### Stages 2 and 3: index lookup and write (`hash_lookup_unit`)

- **Front end.** It takes one final-log entry per cycle, computes the bucket address,
  allocates the next entry of an 8-entry reorder buffer (ROB), and hands the lookup to
  a free one of the four probe units.
- **Probe units.** A probe unit reads bucket nodes through the copy unit and follows
  `next` until the key matches. It then writes the target address into its ROB entry;
  if the end of the chain comes first, it marks a miss.
- **Out-of-order completion.** Memory answers out of order, so probes finish out of
  order.
- **In-order retirement.** The ROB retires in order. The head issues the write of the
  whole log entry to `target + fill[col]`, and the per-column fill counter then
  advances. Each column buffer therefore holds its updates in commit order. Retirement
  writes take priority over probe reads.
- **Misses.** A miss retires without a write and is counted in `miss_count`.
- **Fill counters.** They are kept on chip for 64 columns, indexed by the low column
  bits. `colbuf_clear` restarts them.

## 3. Update application (`update_application_unit`)

This unit applies up to 1024 updates of one column to its dictionary-encoded form.

### Why not re-sort the column

The straightforward method decodes the whole column, applies the updates, sorts the
result to build a new dictionary, and encodes every row again. That costs
O((n+m) log(n+m)) and would need a sorter as large as the column.

This unit uses two facts instead. The old dictionary is already sorted, and only the
updates bring new values. So it sorts only the update values, merges two sorted lists,
and translates old codes to new codes with a lookup table.

### Steps

| State | Work | Time |
|---|---|---|
| `LD_DICT` | Load the old dictionary (sorted distinct values). | 1 value per accepted beat |
| `LD_UPD` | Load the updates `(row, value)` in commit order. Values go into the sorter; rows and values are also kept in commit order for the patch step. | 1 update per beat |
| `SORT` | `bitonic_sorter` sorts the 1024 slots. Unused slots hold an all-ones pad that sorts last. | 55 cycles (`10*11/2` network stages, one per cycle) |
| `MERGE` | `dict_merge_unit` merges the old dictionary with the sorted update values. It removes duplicates, writes the new dictionary, and for every old code writes its new code into a remap table. It also reports the new size and code width. | `old + upd + 1` cycles |
| `DICT_OUT` | Stream out the new dictionary. `dict_out_last` marks its end. | 1 per cycle under back-pressure |
| `REENC` | Translate the column codes: `col_out_code[l] = remap_l[col_in_code[l]]` for 4 lanes per beat. The column streams through without being stored, so its length is unbounded. | 4 codes per cycle, combinational path |
| `PATCH` | For each update, in commit order, binary-search its value in the new dictionary and emit `(row, new code)`. Applying the patches in order gives the final column. | about log2(size) cycles per update |

The remap table exists as four copies, one per lane, so four codes can be translated
in the same cycle.

`dict_overflow` is raised if the new dictionary would exceed `DICT_MAX` (2048). An
overflowing result is not committed.

### Bitonic sorter (`bitonic_sorter`)

The sorter is a stage-serial bitonic network. Each of the N cells holds one value and
has one comparator. In a stage with merge size `k` and distance `j`:

- cell `i` compares itself with cell `i XOR j`;
- it keeps the smaller of the two when bit `log2 j` of `i` equals bit `log2 k` of `i`,
  and the larger otherwise.

Every cell picks its partner through a 10-way mux that selects on `log2 j`. A full
1024-entry network laid out in space would need 55 comparator columns; this design
reuses one column over 55 cycles instead.

## 4. Snapshots and commit (`snapshot_manager`)

Analytical queries must not see a column change halfway through. Copying every
column on every update would be too expensive, so snapshots are lazy and per column.

**Commit.** When an update application finishes without overflow, the top module
commits the column:

- the column's main pointer switches to the new address;
- the length becomes `ceil(rows * code_bits / 128)` words;
- the column is marked **dirty**.

No copy is made at this point.

**Query begin** (`qbegin_valid`, `qbegin_col`; held until `qbegin_ack`):

- **Clean column that has a head snapshot.** The query shares that snapshot. Its
  reference count goes up, and the ack comes in the same cycle.
- **Otherwise** (the column is dirty, or has no snapshot yet):
  1. a free slot is taken;
  2. the column is marked clean;
  3. the copy unit copies the main replica into `snap_base + slot*SLOT_WORDS`;
  4. when the copy completes, the slot becomes the chain head with one reference, and
     the query is acknowledged with `qbegin_new = 1`.

  A commit that arrives while this copy is running marks the column dirty again, so
  the next query takes a fresh snapshot.

**Query end** (`qend_valid`, `qend_slot`) lowers the reference count.

**Garbage collection.** A slot with no reference that is not the head of its chain is
freed at once, and the event is counted in `gc_count`. An old head is therefore freed
as soon as a newer head exists and its last query has ended. The head itself always
stays.

**Out of slots.** If every slot is in use, a new query waits until one is freed.

## 5. Copy unit (`copy_unit`)

The copy unit is the vault's memory engine. It accepts three commands through one
command port; a response carries the command's ID.

- `CP_READ` reads one word.
- `CP_WRITE` writes one word.
- `CP_COPY` copies `len` words from `src` to `dst`.

**Bulk copy.**

- Four fetch units issue reads. Unit `k` handles offsets `k`, `k+4`, `k+8`, and so on;
  the units are served round robin, one read per cycle.
- Each read is recorded in a 16-entry tracking buffer. An entry holds
  `{busy, ready, id, destination, data}`.
- Reads may return in any order. The slot of a read is found through a direct-mapped
  hash of its address (`addr mod 16`), so no search is needed. A read whose slot is
  still busy waits.
- When a read returns, its slot becomes ready. Writeback unit `w` owns the slots with
  `slot mod 4 == w`, and the four writeback units are served round robin; the word is
  written to its destination at once.
- When every word of the copy has been written, the unit responds with the copy's ID.

**Single commands.**

- A single read goes through the same tracking buffer, with a forward flag. Its data
  returns as the response.
- A single write has priority on the write port.

**Sharing in the top.** The snapshot manager and the hash lookup unit share the copy
unit. Snapshot commands win arbitration, and responses are broadcast. Each client
takes the responses with its own IDs: probe units use 0–3, ROB writes use 4, and
snapshots use 8.

## 6. Parameters (defaults)

| Module | Parameter | Default | Origin |
|---|---|---|---|
| merge | `NUM_LOGS`, `IN_DEPTH`, `FINAL_DEPTH` | 8, 128, 1024 | paper |
| hash lookup | `NUM_PROBES` | 4 | paper |
| hash lookup | `ROB_DEPTH`, `NUM_BUCKETS`, `COLBUF_N` | 8, 1024, 64 | own choice |
| copy unit | `NUM_FETCH`, `NUM_WB`, `TRACK_DEPTH` | 4, 4, 16 | own choice (the paper says "multiple") |
| sorter | `N` | 1024 | paper |
| sorter | `W` | 33 | own choice |
| update application | `LANES` | 4 | paper |
| update application | `MAX_UPD` | 1024 | paper |
| update application | `DICT_MAX` | 2048 | own choice |
| snapshots | `NUM_COLS`, `NUM_SLOTS`, `SLOT_WORDS` | 16, 16, 65536 | own choice |

Widths in the package (own choices): 32-bit word addresses, 128-bit data, 32-bit
commit IDs, values and rows, and 16-bit column IDs.

## 7. Where this RTL departs from, or goes beyond, the source design

- **Snapshot bookkeeping in hardware.** It is done by a dedicated controller with
  reference counts. The source design describes the policy (dirty bits, lazy shared
  snapshots, keeping the chain head) but not where it runs.
- **Flush trigger.** The end-of-round flush of a partly full final log is added.
- **Hash node format, column buffer layout and fill counters** are this design's own
  choice.
- **Update application interface.** It is streaming: the old dictionary, the column
  codes and the patches pass through it. The memories that hold columns and
  dictionaries, and the cores that move them, are outside this module.
- **Code remap.** The old-to-new code "hash index" of the update application is a
  direct table indexed by the old code.
- **Update types.** Update application treats every update as a value write to its
  row. Deleted rows are not removed from the column. Inserts must name a row inside
  the column stream.
- **Copy-unit hash.** The copy unit's address hash is direct-mapped and stalls on a
  conflict.
- **Sorter.** It is stage-serial rather than a fully unrolled network.
- **Not built.** The in-memory cores, the task scheduler and data placement (software),
  the coherence directory, the vault memory controller, the DRAM and TSVs, the
  inter-vault network and the host. The fallback to MVCC, which the source design
  compares against, is not part of this design either.

## 8. Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

`tb/vault_mem_model.sv` is a behavioural memory used by the testbenches. It has random
read latency (3–12 cycles), returns reads out of order, and stalls at random.

The testbenches are:

- `tb_merge_unit`: rate, order, and random stalls;
- `tb_hash_lookup_unit`: chains, misses, out-of-order probe completion, and
  column-buffer order;
- `tb_copy_unit`;
- `tb_bitonic_sorter`: includes the 55-stage timing;
- `tb_dict_merge_unit`;
- `tb_update_application_unit`: includes a decoded end-to-end check of the new column;
- `tb_snapshot_manager`;
- `tb_update_shipping_unit`: a reduced final log, so that both trigger kinds happen;
- `tb_polynesia_vault`: the whole vault at default sizes.
  - It ships 1500 updates: one full batch and one flush.
  - It applies the shipped updates of one column and checks the result against a
    reference model.
  - It takes, shares, refreshes and collects snapshots, and compares snapshot contents
    with the main replica.
  - It counts every mechanism: triggers, misses, chain walks, out-of-order returns,
    duplicate removal, new, shared and refreshed snapshots, garbage collection, and
    copy-unit contention.
  - A mechanism that never happened is a failure.

With plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_polynesia_vault \
  rtl/polynesia_pkg.sv rtl/*.sv tb/*.sv -o sim
./obj_dir/sim
```
