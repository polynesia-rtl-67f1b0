# Analytical-island hardware for a hybrid transactional/analytical database in 3D-stacked memory

A hybrid transactional/analytical (HTAP) database serves two kinds of work on the same data:

- short transactions that read and write a few rows;
- long analytical queries that scan whole columns.

The two want different things. Transactions want a row layout. Analytics want a column layout, compressed with a sorted dictionary. Each side should run at full speed, and the analytics should still see recent, consistent data.

This design splits the system into two *islands*:

- The **transactional island** is an ordinary multicore CPU with its own row-format copy of the data.
- The **analytical island** lives in the logic layer of an HMC-like 3D-stacked memory. It keeps a dictionary-encoded, column-format copy of the data.

Three pieces of fixed-function hardware keep the analytical copy fresh and consistent. They sit in each vault, next to the DRAM:

1. **Update shipping.** Updates from the transactional side arrive in per-thread logs. This unit merges them into one log in commit order. It looks up which column each update belongs to, and appends the update to that column's buffer.
2. **Update application.** A column's buffered updates are applied in one batch, in two phases:
   - *Phase 1* builds a new sorted dictionary and a fully re-encoded copy of the column. Readers are not disturbed while this happens.
   - *Phase 2* swaps the column and dictionary pointers in one step.
3. **Consistency (snapshots).** An analytical query reads a snapshot of each column. Snapshots are made lazily:
   - a column update only marks the column dirty;
   - a snapshot is copied only when a query arrives on a dirty column that has no current snapshot;
   - later queries share that snapshot;
   - a snapshot is freed when its last reader finishes, unless it is still the newest one.

   A copy engine with many requests in flight does the copying.

This repository gives synthesizable SystemVerilog for the three pieces, for one vault (`polynesia_vault`) and for a 16-vault cube (`polynesia_cube`, the top). It also has self-checking testbenches for every unit.

The processors are not included:

- the transactional CPUs;
- the small in-order cores in the logic layer that run the query engine and scheduler.

The DRAM and its vault controllers are not included either. Each of these appears only as ports.

## Block map

```
 per-thread update logs (8)                       PIM cores: apply / query commands
          |                                                 |
  +-------v----------------- polynesia_vault -------------- v ---------------+
  |  update_shipping_unit                                                    |
  |   merge_unit --> hash_unit (front end, ROB, 4 x probe_unit) --> writer   |
  |   8 x 128 FIFO    3-level tree       mod-hash (column,row) index   |     |
  |                                                        column buffers    |
  |  buffer reader --> update_application_unit                               |
  |                    bitonic_sorter -> dict_merge_unit -> 4-lane re-encode |
  |                    -> scatter -> pointer swap --------> column update    |
  |                                                          notice          |
  |  snapshot_manager (dirty bits, snapshot heads, reader counts, GC)        |
  |        |  copy commands                                                  |
  |  copy_unit (4 fetch, 16-entry tracking buffer, 4 writeback)              |
  +------------------------ 14 memory ports (128-bit words) -----------------+
```

`polynesia_cube` holds 16 independent vaults. Every vault port becomes an array indexed by vault.

## Memory conventions

Every unit sees memory as 128-bit words (16 bytes, the access size of a vault).

Each memory port has:

- a request with `valid`/`ready`, a write enable, a 4-bit lane write mask, a word address and the write data;
- for reads, one response that comes back carrying its address.

Responses may return in any order and after any delay. Writes get no response. The types are in `polynesia_pkg`.

| Structure | Layout |
|---|---|
| Update key | `{column[7:0], row[23:0]}`: 256 columns, 16 M rows per column |
| Log entry | `{commit_id[31:0], type (insert/delete/modify), key, data[31:0]}` |
| Hash bucket | one word; lane 0 = address of the first node (0 = empty) |
| Hash node | one word; lane 0 = key, lane 1 = value (address of the column's update buffer), lane 2 = next node (0 = end) |
| Column-buffer entry | one word; row `[23:0]`, data `[63:32]`, commit ID `[95:64]`, column `[103:96]`, type `[105:104]` |
| Encoded column | four 32-bit dictionary codes per word; row *r* is in lane *r* mod 4 of word *r*/4 |

The bucket of a key is `table_base + key mod NUM_BUCKETS`.

## Update shipping

### Merge unit

Each transactional thread's log arrives already in commit order. It is loaded into a 128-entry FIFO, one per thread.

A comparator tree over the 8 FIFO heads picks the lowest commit ID every cycle. The tree has 3 levels: 8 → 4 → 2 → 1. The winner goes into a 1024-entry final log.

The tree must not pick a head while another thread's FIFO is empty, because that thread's next entry could be older. So the unit stalls until every queue either has an entry or is flagged as finished (`log_done`). These stalls are counted.

### Hash unit

The column of an update is found through a hash index keyed on (column, row).

1. A front end takes each final-log entry in order and computes the bucket by modulo.
2. It allocates a reorder-buffer (ROB) entry holding the key, the bucket and a ready bit.
3. It hands the lookup to one of four probe units.
4. A probe unit reads the bucket and walks the node list until it finds the key or reaches the end of the list.

Lookups take different times, because the lists have different lengths and memory latency varies. The four probe units therefore finish out of order. The ROB releases entries only from its head, so the output is back in commit order. The statistics count lookups that overlapped.

### Column-buffer writer

For each shipped update, the writer:

- writes a column-buffer entry at `buffer base + count[column]`;
- increments that column's count.

An update whose key is not in the index is dropped and counted.

`batch_trigger` rises when the pending-update count reaches the final-log capacity (1024). `batch_clear` resets the counts after the buffers have been applied.

## Update application

The vault reads the chosen column's buffer back from memory and pushes the updates into `update_application_unit`, in commit order. Then it starts the unit. The unit goes through these steps.

1. **Sort.** The update values, each with its position in the batch as a tag, go through a 1024-entry bitonic sorter.
   - The network has log2(N)·(log2(N)+1)/2 stages, which is 55 for N = 1024.
   - Here it is folded: one stage, N/2 compare-exchanges, per clock, on a register array.
   - A batch takes 55 clocks. The testbench checks this count.
2. **Merge.** `dict_merge_unit` walks the sorted old dictionary and the sorted update values together in one linear pass. It produces:
   - the new dictionary, in the second of two dictionary banks, with duplicates removed;
   - a table that maps each old code to its new code;
   - the new code of every update;
   - the code width the new dictionary needs.
3. **Re-encode.** The old column is read one word (4 codes) at a time. Each code goes through the old-to-new table in four parallel lanes, and the word is written to the new column's address.
4. **Scatter.** Each update's new code is written into its row, in commit order, so the newest update to a row wins. A row at or past the end of the column is an insert and grows the column. Deletes are counted but not applied, because the column format has no deleted-row marker.
5. **Swap.** The column pointer, row count, dictionary bank and dictionary size all change in the same clock edge. The vault then sends a *column update* notice to the snapshot manager.

Until the swap, readers see the old column and the old dictionary unchanged.

## Snapshots and the copy unit

`snapshot_manager` keeps, per column:

- the main-copy pointer and row count;
- a dirty bit;
- the head of its snapshot chain.

Per snapshot slot it keeps the column, address, length and number of readers. It handles three requests:

- **Column update**: record the new pointer and mark the column dirty. Nothing is copied.
- **Query begin**:
  - If the column is dirty, or has no snapshot yet, take a free slot, copy the column into it with the copy unit, make it the new head, mark the column clean and answer `new = 1`.
  - Otherwise add a reader to the current head and answer with it (shared).
  - The answer is the slot number and its address.
- **Query end**: remove a reader from the slot. A slot with no readers that is no longer the head is freed. An old head that has no readers is also freed when it is replaced.

`copy_unit` copies `len` words from `src` to `dst` with four fetch units and four writeback units.

- Fetch unit *f* reads word offsets *f*, *f*+4, *f*+8, …
- Each read gets an entry in a 16-entry tracking buffer. The entry is located by a hash of the address (address mod 16), so a returning response finds its entry without a search.
- When a response arrives, its data is stored in the entry. The writeback unit that owns the entry (slot mod 4) writes it to the destination and frees the entry.
- Up to 16 reads can be in flight. The most seen is reported.

## Parameters (defaults)

| Parameter | Default | Where it comes from |
|---|---|---|
| `NUM_VAULTS` | 16 | HMC-like cube |
| `NUM_QUEUES` × `QUEUE_DEPTH` | 8 × 128 | one queue per transactional thread |
| `FINAL_DEPTH`, `MAX_UPD`, sorter `N` | 1024 | batch size |
| probe units | 4 | |
| `ROB_DEPTH` | 8 | own choice |
| `NUM_BUCKETS` | 1024 | own choice; a real table is sized to the column partition |
| `MAX_DICT` | 2048 | own choice |
| `LANES` | 4 | 16-byte word / 32-bit code |
| copy fetch / writeback units | 4 / 4 | |
| `TB_DEPTH` (tracking buffer) | 16 | own choice |
| `NUM_SNAP` × `SNAP_WORDS` | 16 × 4096 words | own choice |

## Departures and limits

- **Dictionary storage.** The dictionaries are two register banks of 2048 entries each.
  - That is enough for low-cardinality columns.
  - It is not enough for columns with many distinct values, such as prices or dates over many years. Those would need the dictionary kept in DRAM.
  - Values no longer used are not removed from the dictionary.
- **Code width.** Codes are stored 32 bits per row. The unit computes the needed code width (`col_code_bits`) but does not bit-pack the column.
- **Old-to-new code index.** The original describes this index as a hash structure in memory, read by four simplified probe engines that have no reorder buffer. Old codes are dense integers from 0 to n-1, so here the index is a directly addressed on-chip table, read by four parallel lanes. That is a perfect hash with no chains.
- **Deletes** are shipped but not applied.
- **Who writes the column buffers.** The original organisation hands the in-order lookup results to the copy engine, which moves each update to its column. Here a small writer at the end of the shipping pipeline appends each update to its column buffer through its own memory port. The copy unit is used only for snapshots.
- **Snapshot size.** A snapshot slot holds at most `SNAP_WORDS` words (16 K rows). Larger columns need larger slots or column partitioning.
- **Waiting for a slot.** When all snapshot slots are taken, a query that needs a new snapshot waits. A head that is being replaced is only freed after the new copy finishes.
- **Fixed-format values.** Update values are 32-bit integers. Keys are 8-bit column / 24-bit row.
- **Memory.** The 14 memory ports of a vault are left to the vault memory controller to arbitrate. Vault-to-vault traffic, coherence with the logic-layer cores, and the data-placement policy that decides which vault holds which column are not modelled.
- **Comparator tree timing.** The tree is a single combinational level per cycle. It is not pipelined.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a watchdog that counts a failure if the test hangs. They use `tb/mem_model.sv`, a behavioural memory with random per-port latency and stalls.

To simulate, for example, the vault test:

```
verilator --binary --timing -Wno-fatal --top-module polynesia_vault_tb \
    -y rtl -y tb +libext+.sv rtl/polynesia_pkg.sv tb/polynesia_vault_tb.sv
obj_dir/Vpolynesia_vault_tb
```

| Testbench | What it covers |
|---|---|
| `merge_unit_tb` | 8 random logs with random arrival gaps and output back-pressure; global commit order, no loss, one entry per cycle when all queues are fed |
| `probe_unit_tb` | empty buckets, chains of 1–3 nodes, hits and misses, hop counts |
| `hash_unit_tb` | overlapping lookups over long chains; results in input order |
| `update_shipping_unit_tb` | a full 1024-update batch; column-buffer contents and counts against a reference |
| `bitonic_sorter_tb` | full and partial batches with duplicates; result and the 55-cycle latency |
| `dict_merge_unit_tb` | dictionary merge, old-to-new map, update codes, code width |
| `update_application_unit_tb` | column and dictionary after a batch with modifies, inserts and deletes |
| `copy_unit_tb` | copies of many lengths, memory contents, in-flight depth |
| `snapshot_manager_tb` | lazy creation, sharing, garbage collection, slot exhaustion |
| `polynesia_vault_tb` | one vault end to end (see below) |
| `polynesia_cube_tb` | the full 16-vault cube at default sizes, all vaults at once |

The end-to-end sequence is in `tb/vault_driver.sv`:

1. Build a hash index and a 200-row column.
2. Take a first snapshot.
3. Ship 1024 updates from 8 logs.
4. Apply the column's batch.
5. Take a second snapshot, share it, and free the first.

The contents are checked at each step. The sequence counts how often each mechanism happened, and any mechanism that never happened is a failure:

- merge stall;
- overlapping lookups;
- dropped update;
- insert;
- ignored delete;
- snapshot created, shared and freed;
- words copied;
- update application.

The full-cube test takes several minutes to compile with Verilator, because the design is large: 16 vaults, each with a 1024-entry sorter and 2048-entry dictionaries.
