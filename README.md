# FIGARO and FIGCache in SystemVerilog

A DRAM bank is built from many subarrays. Each subarray has its own row of sense
amplifiers, the *local row buffer* (LRB). All subarrays of a bank share one set of
*global bitlines* that ends in the bank's *global row buffer* (GRB). That path is
normally used only for one column at a time, between an open row and the chip I/O.

FIGARO uses the same path to copy **one column (64 B across the rank) from the open
row of one subarray into any column of another subarray of the same bank**. The
copy does not use the memory channel, and it takes about the same time whether the
subarrays are near or far apart. It adds one DRAM command, `RELOC`, and a little
logic per subarray:

* a row-address latch, so that two subarrays can hold different raised rows;
* a row-address multiplexer that chooses between the latch and the shared row
  address bus;
* a column-address multiplexer that chooses between the source column and the
  destination column.

FIGCache is an in-DRAM cache built on top of FIGARO. Each bank sets aside a few
*cache rows*. In the main configuration these are two small, fast subarrays with
32 rows each. The cache stores *row segments* of 1/8 row (16 columns), not whole
rows. Hot segments from different rows are gathered into one cache row. After
that, an access to any of them can be a row-buffer hit in a fast subarray.

This repository contains:

* synthesizable RTL for the FIGARO peripheral logic of a bank;
* synthesizable RTL for the FIGCache tag store, its replacement logic and its
  memory controller;
* a behavioural model of the analogue part of a DRAM bank (cells, sense
  amplifiers, bitlines);
* self-checking testbenches for every block.

## 1. The RELOC operation

A relocation of N columns from row A (subarray S) to row B (subarray D) uses four
kinds of command:

```
ACT  S,A            open the source row; wait tRAS (35 ns) until it is restored
RELOC col, D, dcol  repeat N times: LRB[S][col] -> GRB -> LRB[D][dcol]   (1 ns each)
ACT  D,B            raise row B of D: relocated columns overwrite B's cells,
                    every other column of B keeps its own value; wait tRCD
PRE                 close both subarrays
```

The command is 21 bits: a 7-bit source column, a 7-bit destination subarray and a
7-bit destination column. The source is implied: it is the row that is already
open. At DDR4-1600 the whole sequence for one column is 35 + 1 + 13.75 + 13.75 =
63.5 ns.

The step that needs explaining is the ACT of the destination. The RELOC drives
only the selected column of the precharged LRB in subarray D. The sense amplifiers
of that column then hold a full value. When row B's wordline rises, those
columns write their value into the cells. Every other column is still
precharged, so it senses the cell as a normal activation does. This is why
FIGARO can copy at column granularity. It is also why `dram_bank_array` models
two states for a column of an LRB: *precharged* and *driven*.

### Blocks of one bank

| file | role |
|---|---|
| `figaro_bank_ctrl` | Decodes ACT/RD/WR/PRE/RELOC for one bank. It tracks the open mask, the source subarray (the first subarray activated after PRE) and the last activated subarray. It gives each subarray a column role (none, source or destination). It flags commands that the substrate cannot carry out. |
| `figaro_row_addr_latch` | One per subarray. It latches the 40-bit predecoded row address on that subarray's ACT and keeps its wordline up until PRE. This lets a second ACT to another subarray leave the first one open. |
| `figaro_col_addr_mux` | One per subarray. It selects the source or the destination column and the direction of the transfer. |
| `dram_bank_array` | Behavioural model of the cells, the LRBs, the global bitlines and the GRB. It is not synthesizable. |
| `figaro_bank` | Joins the blocks above: 64 slow subarrays of 512 rows plus 2 fast subarrays of 32 rows, each row having 128 columns of 512 bits. |

Row addresses travel in partially predecoded form: five one-hot groups of 8, which
is 40 bits. `figaro_pkg::predecode_row` forms them and `local_row_of` reverses
them. The model checks no timing. All DRAM timing is enforced by the controller.
The model does report two things: a protocol error in `figaro_bank_ctrl`, and a
cycle in which two LRBs drive the global bitlines (`multi_drive`).

## 2. FIGCache

### Tag store (`fts_portion`, `fts`)

Each bank has a fully associative portion of 512 entries, one per cache slot
(64 cache rows × 8 segments). An entry is 26 bits:

| field | bits |
|---|---|
| tag | 19 |
| valid | 1 |
| dirty | 1 |
| benefit counter | 5 |

The tag is `{0, row[14:0], segment[2:0]}`. A segment address needs only 18 bits,
so the top tag bit stays 0. A lookup compares the tag against all 512 entries in
one combinational step. On a hit, the benefit counter goes up by one and stops at
31, and a write hit sets the dirty bit. An inserted entry starts clean with
benefit 0. Sixteen portions make 26 KB per channel.

### Replacement (`figcache_repl`)

Replacement works on whole cache rows, so that free slots gather in one row and
can be refilled with segments that are used together:

1. Fill an invalid slot first. The lowest-numbered invalid slot is taken.
2. When every slot is valid, pick the cache row whose benefit counters have the
   lowest sum. Load its number into a 6-bit row register and mark all 8 of its
   segments in an 8-bit vector.
3. Each later insertion evicts the marked segment with the lowest benefit and
   clears its bit.
4. When the vector is empty, choose a new row as in step 2.

Ties go to the lowest index. The sum-and-minimum search over 64 rows is one
combinational stage.

### Controller (`figcache_ctrl`)

The controller handles one 64 B request at a time.

The address map of a block address is `{row[14:0], bank group[1:0], bank[1:0],
column[6:0]}`. `row[14:9]` is the slow subarray and `row[8:0]` the row inside it.
`column[6:4]` is the segment and `column[3:0]` the block inside it.

Cache slot `s` is cache row `s/8`, segment position `s%8`. Cache row `r` lies at
row `r%32` of fast subarray `64 + r/32`. A cached block therefore usually lands
in a different column than at home. The testbenches count these *unaligned*
relocations separately.

The controller handles the three kinds of request as follows:

* **Hit.**
  1. Access the cache copy.
  2. Increment its benefit counter.
  3. On a write, mark the entry dirty.
* **Miss** (insert-any-miss: every miss inserts):
  1. If the chosen victim is dirty, write it back:
     * `PRE` (if a row is open) and `ACT` the cache row;
     * wait tRAS;
     * 16 × `RELOC` to the home subarray;
     * `ACT` the home row, wait tRCD, then `PRE`.
  2. Serve the request from its home row.
  3. While the home row is still open, copy the segment into the victim's slot:
     * 16 × `RELOC` (after tRAS of the home ACT);
     * `ACT` the cache row, wait tRCD, then `PRE`.
  4. Install the new tag.
* **Uncacheable** (reserved-row variant only): a miss to the subarray that holds
  the reserved rows is served without insertion.

Rows stay open after an ordinary access (open-page policy). A relocation ends
with PRE.

Timing is in 1.25 ns command-clock cycles:

| parameter | slow subarray | fast subarray |
|---|---|---|
| tRCD | 11 | 6 (−45.5 %) |
| tRP | 11 | 7 (−38.2 %) |
| tRAS | 28 | 11 (−62.9 %) |

RELOC occupies one cycle. The DDR4 values that govern column commands are
tCL 11, tCWL 9, tBL 4, tWR 12, tRTP 6 and tCCD 4. In the testbench, a read that
hits an open fast cache row takes 19 cycles. A read that must close a row and open
a slow row takes 37 cycles.

`FAST_CACHE = 0` selects the variant without fast subarrays. There the 64 cache
rows are the top 64 rows of slow subarray 63, and segments of that subarray are
never cached.

### Top (`figcache_top`)

`figcache_top` is one channel: the controller, the 16-portion tag store and 16
`figaro_bank` instances on a shared command bus. Read data returns from the bank of
the last READ. `ev` carries one-cycle event strobes:

* hit, miss, insert, write-back, evict;
* new drain row, uncacheable;
* row hit, row conflict;
* RELOC, unaligned RELOC.

`proto_err` and `multi_drive` gather the banks' error flags.

## 3. Where this RTL departs from, or adds to, the description it follows

* **No request queue or scheduler.** There is no FR-FCFS scheduling, no
  parallelism across banks and no refresh. One request completes before the next
  is accepted, so the latencies are those of an unloaded channel.
* **Order of a miss.** The write-back comes first, then the demand access, then
  the insertion. Both copies go through the GRB, one column per RELOC.
* **Which subarray is the source.** The source of a RELOC is the first subarray
  activated after a PRE. READ and WRITE go to the last activated subarray.
* **Tag width.** The tag keeps 19 bits even though a segment address needs 18.
* **Timing conflict.** The 35 ns wait before the first RELOC is taken as tRAS, as
  the text says, although the timing figure labels that interval tRCD.
* **Rank as one wide array.** The rank of eight ×8 chips is modelled as a single
  512-bit-wide array, and all chips move their 8 B shares in lockstep.
* **Not modelled.** The analogue timing of the fast subarrays, the DDR4 PHY and
  the processor side are not modelled. The fast subarrays' speed exists only as
  controller timing.
* **Predecoding.** The five-group predecoding of the 40-bit row address is this
  design's choice of form.
* **Reserved rows.** In the reserved-row variant, which rows are reserved (the top
  64 rows of the last subarray) is this design's choice.
* **Only the main policies are built.** The other replacement policies, insertion
  thresholds above 1, and cache-size and segment-size settings other than the
  defaults are not built as separate logic. Cache and segment sizes are
  parameters (`CACHE_ROWS`, `N_FAST_SA`, `SEGS`), but only the defaults were
  simulated.

## 4. Simulating

All files are plain SystemVerilog. `figaro_pkg.sv` must be compiled first. For
example, to run the full-size end-to-end test:

```
verilator --binary --timing -Wno-fatal rtl/figaro_pkg.sv \
  rtl/figaro_row_addr_latch.sv rtl/figaro_col_addr_mux.sv rtl/figaro_bank_ctrl.sv \
  rtl/dram_bank_array.sv rtl/figaro_bank.sv rtl/figcache_repl.sv rtl/fts_portion.sv \
  rtl/fts.sv rtl/figcache_ctrl.sv rtl/figcache_top.sv tb/tb_figcache_top.sv \
  --top-module tb_figcache_top -o sim && ./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_figaro_row_addr_latch` | latch, hold and precharge of the wordline address |
| `tb_figaro_col_addr_mux` | column selection and direction for all roles |
| `tb_figaro_bank_ctrl` | command decoding, roles, error flags |
| `tb_dram_bank_array` | sense and partial-row write-back of relocated columns (reduced size) |
| `tb_figaro_bank` | a 4-column example (subarray 10 row 7 → subarray 40 row 3, column 3 → column 1), then 40 random relocations against a reference memory (full size) |
| `tb_figcache_repl` | victim choice against a reference model of RowBenefit |
| `tb_fts_portion`, `tb_fts` | associative match, saturation, dirty bit, isolation between banks |
| `tb_figcache_ctrl` | controller, tag store and two full-size banks in the reserved-row variant, including uncacheable misses |
| `tb_figcache_top` | whole channel at default parameters |

`tb_figcache_top` sends about 6000 random reads and writes to two banks. It then
reads back every address that was written and compares each read with a
reference memory. It fails if any mechanism of the fast-cache configuration never
occurs: hit, miss, insertion, eviction, write-back, new drain row, row hit, row
conflict, RELOC or unaligned RELOC. It also fails on any bank protocol error.
