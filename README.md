# JSPIM rank: in-DRAM hash-bucket search for database joins

A hash join spends most of its time probing a hash table with keys from a
large fact table. On a CPU, each probe is a random DRAM access followed by a
walk through a bucket, and the walk grows with collisions and duplicates. JSPIM
moves the probe into memory.

One chip of an LRDIMM rank is made PIM-enabled: every subarray row buffer gets
a row of comparators and a match select. With that hardware, a whole hash
bucket can be searched in one row activation. Each bucket is exactly one DRAM
row, so a probe costs the same no matter how full its bucket is. A small
Rank-Level Unit (RLU) sits beside the LRDIMM data buffers and drives the
search:

1. The regular DRAM chips of the rank hold the fact table's key column.
2. The RLU takes the keys as they stream out of those chips and hashes each to
   a row.
3. It has the PIM chip search that row and returns (key, value) records to the
   host.

Duplicate values are kept out of the hash table. The host holds them in a
separate list, and each stored value carries a one-bit flag saying "more
values exist". A bucket therefore holds unique keys only, and at most one slot
matches.

This repository gives synthesizable SystemVerilog for the rank's logic:

- the PIM chip (subarrays with comparators, banks, chip sequencing);
- the RLU (command decoder, key buffer, optimization window, PIM controller,
  output buffer).

Each part has a self-checking testbench, including end-to-end tests of the
whole rank.

## Hash table layout in the PIM chip

The hash table uses 32-bit dictionary-encoded keys and 32-bit values. The key
is split in two parts:

- The **bucket** is the low `BUCKET_W = log2(NUM_BANKS*ROWS_PER_BANK)` bits.
  It names the one PIM row that may hold the key. Its low `log2(NUM_BANKS)`
  bits pick the bank, so consecutive codes fall in different banks. The rest
  of the bucket is the row inside the bank.
- The **tag** is the remaining `TAG_W = 32 - BUCKET_W` upper bits. Only the
  tag is stored in the row, because the bucket is implied by the row.

A row is cut into `SLOTS = ROW_BITS / ENTRY_W` slots. Slot `s` occupies bits
`[s*ENTRY_W +: ENTRY_W]` and holds the following fields, MSB first:

| field | width | meaning |
|-------|-------|---------|
| valid | 1 | the slot holds an entry |
| dup   | 1 | the value has more matches in the host's duplicate list |
| tag   | TAG_W | stored key bits, compared by the slot's comparator |
| value | 32 | returned on a match |

At the defaults, the chip has 16 banks of 65536 rows with 8192-bit rows
(1 KB). That gives:

- BUCKET_W = 20 and TAG_W = 12;
- ENTRY_W = 46 and 178 slots per bucket;
- 1,048,576 buckets, about 186.6 M entries in total.

The leftover 4 bits at the top of a row are unused. The hash is the identity
on the index bits. A dense code space spreads evenly over the buckets:
consecutive codes go to consecutive buckets.

## Searching a row: comparators and match select

`pim_subarray` is a block of `ROWS` DRAM rows with one row buffer.
Activating a row copies it into the row buffer. Behind the row buffer sit one
`key_comparator` per slot and one `match_select`:

- A comparator compares the slot's tag with the probe tag. It fires only if
  the slot's valid bit is set.
- `match_select` takes the lowest matching slot and outputs its slot number,
  value and dup flag.
- With no match it outputs the *null* result, which is all zeros with
  `hit = 0`.

Because buckets hold unique keys, the priority order only matters if the host
breaks that rule. The comparison is combinational over the open row. Slot and
64-bit column writes go both to the row buffer and to the cell array, so the
row buffer always mirrors the open row.

`pim_bank` stacks `ROWS_PER_BANK/ROWS_PER_SA` subarrays (64 at the
defaults):

- The upper row-address bits choose the subarray that an activate goes to.
- One row per bank is open at a time.
- A mux over the subarray outputs acts as the column decoder: it returns the
  open subarray's search result, slot or column.

## The PIM chip and its timing

`pim_chip` takes one request at a time (valid/ready) and answers each with a
single `rsp_valid` pulse. It supports these operations:

| op | effect |
|----|--------|
| SEARCH | search a row for a tag, giving hit/slot/value/dup |
| WR_SLOT, RD_SLOT | write or read one whole slot entry |
| WR_COL, RD_COL | write or read 64 bits, i.e. the chip used as plain DRAM |

The policy is open-page, and the latency from acceptance to response depends
on the bank's state:

| bank state | cycles |
|------------|--------|
| the row is already open | 2 + d |
| bank closed | 2 + T_RCD + d |
| another row open (precharge first) | 2 + T_RP + T_RCD + d |

Here `d` is `T_CMP` for a search, `T_CL-1` for a read and 0 for a write. The 2
fixed cycles are the request register and the result register.

- `T_CMP` is the extra comparator delay. It defaults to 0 because the
  comparators are expected to add less than a cycle, and it can be raised to
  study a slower comparator.
- `T_RP`, `T_RCD` and `T_CL` default to 22 cycles, as in a DDR4-3200 22-22-22
  part.
- The chip counts activations and searches (`act_count`, `search_count`). The
  gap between the two shows how often the open row was reused.

## The Rank-Level Unit

The RLU is made of five parts, listed below in the order data flows through
them.

**Command decoder (`rlu_cmd_decoder`).** The host controls the RLU by writing
64-byte lines to reserved addresses. Line `CMD_BASE + 64*op` carries command
`op`. Any other write is ordinary memory traffic and is ignored. The commands
and their payload layouts are:

| op | command | payload (512-bit line) |
|----|---------|------------------------|
| 0 | PIM_START | none: enter PIM mode |
| 1 | PIM_OFF | none: leave PIM mode; the rank is plain DRAM |
| 2 | SELECT_WHERE | `[31:0]` key |
| 3 | SELECT_DISTINCT | `[31:0]` first bucket, `[63:32]` bucket count |
| 4 | ENTRY_UPDATE | `[31:0]` bucket, `[47:32]` slot, `[48]` dup, `[49]` valid, `[95:64]` key, `[127:96]` value |
| 5 | INDEX_UPDATE | `[31:0]` key, `[63:32]` new value, `[64]` dup |
| 6 | TABLE_UPDATE | `[31:0]` bucket, `[47:32]` first slot, `[50:48]` n (1..7); entry i at `[64*(i+1) +: 64]` = `{dup, tag (low TAG_W of 31 bits), value}` |

The mode bit resets to PIM mode (`RESET_PIM_MODE`). In memory mode, every
command except PIM_START is dropped and counted (`ignored_cmds`).

**Key buffer (`rlu_key_buffer`).** Key bursts from the regular chips arrive
as `KEYS_PER_BURST` keys plus a count of valid keys. Each burst goes into a
`DEPTH`-deep FIFO and is handed out one key at a time. When the FIFO is full,
`burst_ready` drops. This is the stall: the host's key stream is held back
until the PIM side has produced enough answers. The cycles spent stalled are
counted. Keys are accepted only in PIM mode.

**Optimization window (`rlu_opt_buffer`).** This is a coalescing window over
the last `WINDOW = 8` distinct keys searched, together with their results. It
works as follows:

- A key found in the window is answered from it without a PIM search, and is
  counted in `filtered_count`.
- A key not in the window is searched, and its result replaces the oldest
  window entry (FIFO order).
- A repeat that falls outside the window is searched again. This is
  deliberate: the window only catches repeats that are close together in the
  stream.
- Every update command clears the window, so it can never return a value that
  was just overwritten.

**PIM controller (`rlu_pim_ctrl`).** The controller hashes keys and drives the
PIM chip. It handles one job at a time, and host commands go before probe
keys. Each job works as follows:

- **join probe**: one SEARCH. The answer goes back to the window.
- **select where**: one SEARCH, returned as a SELECT record. Sent for a key
  whose row is already open, this costs one short row access.
- **index update**: a SEARCH, then on a hit a WR_SLOT with the new value. The
  UPDATE record reports whether the key was present.
- **entry update**: one WR_SLOT at a given bucket and slot. Clearing the
  valid bit erases the slot.
- **table update**: up to 7 WR_SLOTs taken from one burst. They stop at the
  last slot of the row.
- **select distinct**: RD_SLOT over every slot of a range of buckets. Each
  valid entry is returned as a DISTINCT record. The key is rebuilt as
  `{tag, bucket}`, and since the table holds unique keys this is the distinct
  set of the column.

**Output buffer.** This is an 8-entry FIFO of `result_t` records:
`{kind, hit, dup, key, value}`. A null join result has `hit = 0` and
`value = 0`. The host follows `dup = 1` into its own duplicate list. Command
results take priority over join results when both are ready in the same
cycle.

## Memory mode

After PIM_OFF, the RLU first finishes what it holds. The `mem_*` port then
reaches the PIM chip's columns (64-bit reads and writes at bank/row/column),
so the chip works as an ordinary DRAM chip. The hash table stays in place and
can be read as plain data. PIM_START gives the chip back to the RLU, after any
memory access in flight has completed. In PIM mode, `mem_req_ready` stays low.

## What is outside the RTL

These parts of the rank are not in the RTL:

- the regular DRAM chips that hold the key column;
- the LRDIMM data buffers and register clock driver;
- the host with its DMA engine;
- the software side: dictionary encoding, building the hash table, and the
  duplicate list.

None of these is logic of the accelerator itself. At the top level
(`jspim_rank`) they appear as ports:

| ports | carry |
|-------|-------|
| `wr_*` | host writes |
| `burst_*` | key bursts from the regular chips |
| `res_*` | result records to the host |
| `mem_*` | memory-mode access |

## Where this design makes its own choices

The following are choices of this design, not fixed by the underlying
architecture:

- the command address map and all payload layouts;
- the valid bit in each slot;
- low bits as the index bits;
- lowest-slot priority in the match select;
- FIFO replacement in the window, and clearing it on updates;
- the buffer depths (key buffer 4 bursts of 16 keys, output 8);
- 16 banks per chip and 1024 rows per subarray;
- the one-job-at-a-time PIM controller and the one-request-at-a-time chip,
  with no pipelining across banks;
- DDR4-3200 22-22-22 timings.

Two behaviours are interpreted rather than taken as given:

- **The stall.** The architecture calls for the RLU to compute a stall count
  N: how many PIM answers to wait for before more keys are fetched. Here the
  stall is plain ready/valid back-pressure on the key bursts, which has the
  same effect whatever the buffer sizes are.
- **Repeated keys.** The RLU itself answers a key that repeats within the
  window. A host that wants to drop repeated results can do so from the
  records.

The main architecture suggests a smaller chip: about 105 k comparators per
rank. Here, 178 slots × 64 subarrays × 16 banks gives about 182 k comparators
in the PIM chip. The row size was kept at 1 KB, and the bank and subarray
counts were assumed, so the two totals differ.

The request-level parallelism of a real DRAM controller is not modelled.
That includes overlapping banks, refresh and tFAW. Each rank here finishes one
PIM operation before it starts the next, so its throughput is lower than a
pipelined controller would reach. The results it returns are the same.

## Capacity

At the defaults, one PIM chip holds 1,048,576 buckets of 178 entries. Whether
a table fits depends on the fullest bucket, not on the total size. With dense
dictionary codes, N keys put at most ⌈N / 1,048,576⌉ keys in any bucket. That
gives:

| table | rows | keys per bucket | fits |
|-------|------|-----------------|------|
| SSB `part` (SF1 / SF10 / SF100) | 0.2 M / 2 M / up to 20 M | up to 20 | yes |
| `customer` (SF100) | 3 M | 3 | yes |
| `supplier` | small | at most 1 | yes |
| synthetic build table R (0.5 M / 8 M / 32 M) | as named | up to 31 | yes |

For the synthetic tables, skew in the probe side changes nothing, because
duplicate build values go to the host list.

Sparse or adversarial codes can overflow a single bucket once it holds more
than 178 keys. The host has to avoid that when it builds the dictionary.

## Files

All RTL is in `rtl/`, one unit per file:

| file | contents |
|------|----------|
| `jspim_pkg.sv` | widths, command and op enums, `result_t` and `cmd_req_t` |
| `key_comparator.sv`, `match_select.sv`, `pim_subarray.sv`, `pim_bank.sv`, `pim_chip.sv` | the PIM chip |
| `rlu_cmd_decoder.sv`, `rlu_key_buffer.sv`, `rlu_opt_buffer.sv`, `rlu_pim_ctrl.sv`, `rlu.sv` | the RLU |
| `sync_fifo.sv` | a small FIFO helper |
| `jspim_rank.sv` | the top: RLU + PIM chip + memory-mode port |

Every file opens with a comment giving its function, timing and interface.

## Simulating

Each `tb/tb_<unit>.sv` is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops, and a watchdog ends a hung run as a
failure. For example:

```
verilator --binary --timing --assert -y rtl rtl/jspim_pkg.sv tb/tb_jspim_rank.sv \
          --top-module tb_jspim_rank -Mdir obj_rank
obj_rank/Vtb_jspim_rank
```

Run this from the repository root, because the rank testbenches include
`tb/tb_join_tasks.svh` and `tb/tb_rank_sequence.svh` by that path. What the
testbenches cover:

- **Unit tests.** These shrink the row, bank and chip sizes. `tb_pim_chip`
  checks the three latency formulas above exactly, for every operation kind.
- **`tb_rlu`.** The RLU drives a small PIM chip through a key stream.
- **`tb_jspim_rank`.** A reduced rank (2 banks × 32 rows × 512-bit rows,
  8 slots) is put through a full session:
  1. It builds a table with entry and table updates.
  2. It runs a join of 300 keys (present, absent and repeated) with a slow
     consumer, so the key buffer stalls.
  3. It measures select-where latency with the row open and on a row
     conflict. The difference must be exactly `T_RP + T_RCD`.
  4. It does an index update, and the window must not hide it.
  5. It erases a slot, then runs a select distinct over two buckets.
  6. It switches to memory mode. The following must hold there: commands are
     dropped, key bursts are refused, the bucket row reads back as the
     documented slot image, and a column write/read works.
  7. It returns to PIM mode and runs another join.

  Each mechanism is counted, and one that never occurs is a failure. Those
  mechanisms are stall, window filtering, null results, the dup flag,
  open-row reuse, row conflicts, distinct, index update, mode switches,
  memory access, and dropped commands and keys.
- **`tb_jspim_rank_fullrow`.** This runs the same sequence on the largest
  rank that was simulated: 16 banks and 8192-bit rows as in the default
  design, DDR4 timings and 16-key bursts, but only 64 rows per bank, so
  146 slots of 56 bits per bucket. It builds and runs in under a minute.

The rank at its full default size has not been simulated end to end:
16 × 65536 rows, 1024 subarrays, 8 Gbit of cells. Verilator needs several
minutes and many GB just to translate it. It then emits a model whose C++
takes far longer to compile than a ten-minute test budget. The full-size
RTL is linted and elaborated by Verilator and by slang; its building blocks
are the ones exercised above.
