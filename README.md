# HDDB in-storage SQL search: register-transfer model

SQL predicates (`WHERE category = 'x'`, `WHERE qty >= 120`) usually dominate the
cost of scanning a large fact table, because every row must be moved from
storage to a processor only to be thrown away. HDDB evaluates the predicate
inside the flash array instead.

Every table cell is encoded offline as a binary hypervector (HV), a few thousand
random-looking bits. Equal values give equal HVs, and unrelated values give HVs
about half the bits apart. The HVs are written into 3D ferroelectric NAND
(FeNAND) as triple-level cells, and one row's HV for a column lies along one
bit line. A query HV is driven onto the word lines, and every bit line
reports at once whether its cells lie within a window around the query. That
one analog step compares all rows in parallel. Small near-storage processors
(NSPs) next to each array turn these per-bit-line answers into per-row scores.
They select the matching rows, unbind and decode their HVs back into values,
and aggregate them. Only the final results travel to the host.

This directory holds a SystemVerilog model of that accelerator:
- a behavioural model of the FeNAND plane;
- synthesizable RTL for both kinds of NSP, their SRAMs and datapaths, and the
  H-tree network that connects the cores to the host;
- a top level with 12 table cores and 4 dictionary cores.

Everything compiles with Verilator and yosys/slang, and every block has a
self-checking testbench.

## 1. Hypervectors in TLC cells

**Gray packing.** A cell stores three HV bits as one of eight threshold-voltage
levels. The mapping is the reflected Gray code: level `L` holds bits
`L ^ (L >> 1)`, i.e. `000 001 011 010 110 111 101 100`. Neighbouring levels
differ in one bit, so a cell that drifts by one level corrupts one HV bit, and
HDC tolerates that by design (`tlc_gray_codec`). The same code turns HV bits
back into levels whenever an HV must drive word lines (the dictionary search)
and levels into bits when a stored HV is read out.

**Column-wise layout.** A plane has 128 blocks of 128 word lines, and each word
line is a page of 16384 cells, one per bit line. Pages are numbered
`block * 128 + wl`. Each column of a table occupies a run of pages:
- bit line `r` holds row `r`;
- cell `i` of the row's HV for that column sits on page `col_page + i`.

A plane therefore holds 16384 rows of a column whose HV is up to 16384 cells
long. Larger tables are split across cores by rows.

**Dictionaries.** A dictionary core stores the HV of every distinct value of a
column the same way, one entry per bit line. Entry `s` stands for key `s`: the
host orders the dictionary so that the entry index is the value, or an index
into the host's own value table.

**Numeric columns.** A numeric value is encoded in four levels of 100 bins:
- level 1 picks one of 100 coarse bins over the value range;
- each further level splits the chosen bin into 100 again.

The cell HV is made of four segments, one per level. Each segment holds the HV
of the bin index at that level, taken from a single 100-entry bin dictionary
shared by all levels. A value is therefore recovered as four 7-bit indices,
which compare like a four-digit number in base 100.

## 2. DBAM: comparing all rows in two sensing cycles

The array search is dual-boundary approximate matching (DBAM). Eight
consecutive word lines of one block (`K = 8`, one *group*) are driven with the
eight query levels `q_i`. A NAND string conducts only if all its cells
conduct, so each sensing cycle computes an AND over the eight cells of every
bit line:

    UBC = AND_i [ r_i <= q_i + 0.5 ]     (upper-bound check, first sense)
    LBC = 1 - AND_i [ r_i < q_i - 0.5 ]  (lower-bound check, second sense)

`UBC = 1` says no cell is above its query level. `LBC = 1` says not every
cell is below it. Both are 1 when the group matches exactly. A row's score over
an HV of `G` groups is `sum_j (UBC_j + LBC_j)`, at most `2G`.

The plane model (`fenand_plane`) evaluates this rule with levels counted in
half steps, so that the ±0.5 margins (`ALPHA_POS2`, `ALPHA_NEG2` = 1 half
level) are exact. A search takes two sensing periods of `SENSE_LAT` cycles
each; the default of 50 000 cycles is the 50 µs page read at a 1 GHz NSP clock.
Afterwards the page buffer holds one UBC and one LBC bit per bit line, which
the NSP reads 64 bit lines at a time, matching the NSP's 64-bit I/O.

The model also performs page erase, single-cell program (a loading shortcut,
not timed) and normal page read. It is a model, not circuitry. It adds no
noise itself; the testbenches program one-level shifts where they want errors.

### Score windows and the double buffer

The NSP's score memory is 2 KB, split into two banks (`dbuf_mem`). With
16-bit scores in 64-lane words, one bank holds 8 words, i.e. the scores of
512 rows. The NSP therefore scans its 16384 bit lines in 32 *windows* of 512
rows:
- for each window and each DBAM group, it issues a search and then streams the
  window's eight page-buffer words through the accumulator (`dbam_accumulator`:
  read-modify-write of 64 scores per cycle, restarting on the first group);
- at the end of a pass the banks swap;
- the finished bank is evaluated while the next pass (the next bin, level or
  window) accumulates in the other.

Each window is searched again rather than keeping 16384 scores, which would
need 32 KB of SRAM. The evaluation needs 8 cycles, and every pass needs at
least a full search, so the "evaluation still busy" interlock
(`stat_drain_stalls`) exists for safety but cannot trigger at these timings.

## 3. The table core (`etc_nsp`)

The encoded-table core NSP receives the query, searches its plane, and sends
the selected rows on for decoding.

**String predicate.** This is one pass over the column's `G` groups, with the
query HV taken from the query buffer. A row matches when its score reaches
the host-given threshold; `2G` asks for an exact match, and lower values
tolerate noise.

**Numeric predicate.** There is one pass per level and per bin: 4 × `num_bins`
passes, each over that level's segment, with bin `b`'s HV as the query. After
each pass the evaluation keeps, for each row, the best score so far and its
bin. The bin with the highest score is the row's index at that level, with
ties going to the lower bin. After the last pass the 5-lane 7-bit comparator
(`bin_comparator`) compares the four indices of 5 rows per cycle with the
query's indices, coarsest first. It supports EQ, NE, LT, LE, GT and GE.

**Selection and decode stage 1.**
- Selected rows of the window are listed, up to `MAX_SLOTS` = 64 at a time.
- For each cell of the *projected* column's HV (the column the query returns
  or aggregates), one normal page read fetches the cell of every listed row.
  Each is Gray-decoded into the 20 KB select scratchpad (`select_scratchpad`),
  14 cells per 42-bit word.
- Each row's words then pass through the 42-lane XOR array
  (`xor_unbind_array`) together with the column key HV. The stored HV was
  `value_HV XOR key`, so this unbinding recovers the value HV.
- The result leaves as one packet to the dictionary core.
- If the slot list or the scratchpad fills, the batch is decoded and sent, and
  the collection continues where it stopped (`stat_sp_overflows`).
- When all windows are done, an `ETC_DONE` flit reports the number of
  selected rows.

## 4. The dictionary core (`lud_nsp`)

The dictionary core decodes each incoming unbound HV by searching it against
its dictionary:
1. The HV's bits are Gray-packed into levels, 8 per group, and drive DBAM
   searches over all dictionary entries. The entries are scanned in windows of
   512 with the same accumulator and double buffer as the table core.
2. The argmax over all entries is the decoded key, with ties going to the
   lower entry.
3. The `(source core, row, key)` result is stored two per 128-bit word in the
   20 KB scratchpad (2560 results).

When every table core named in the configuration has sent `ETC_DONE`, the
results are either:
- returned one `RES_ROW` flit each (a pure filter), or
- folded two per cycle by the 2-unit ALU (`agg_alu`: COUNT, SUM, AVG, MIN,
  MAX) into one `RES_AGG` flit.

A full scratchpad is emptied the same way before decoding continues
(`stat_sp_flushes`), so aggregates over any number of rows are exact. A
closing `RES_DONE` carries three counts: decoded HVs, aggregated values and
the selected-row total.

## 5. The network and its protocol

The cores talk over an H-tree of switches (`htree_node`):
- A leaf switch serves four cores.
- A root switch joins the leaves.
- The root's parent port is the host interface of `hddb_top`.

Core ids are 0..11 for table cores and 12..15 for dictionary cores. Id 31 is
the host and id 30 is broadcast.

Routing: a flit from above goes to the child whose id range holds its
destination, or to every child for a broadcast. A flit from a child goes down
if the destination is in this subtree and up otherwise.

Each output has a one-flit register and is refilled only when empty, so no
ready signal passes combinationally through a switch. The parent has
priority; children are served round-robin. A broadcast moves only when every
child output can take it.

Multi-flit packets (an HV) lock every output they pass until their `last`
flit, i.e. wormhole switching. Without this, two table cores sending to the
same dictionary core would interleave words of different rows.

A flit (`hddb_pkg::flit_t`) is `{dst[5], src[5], kind[4], last, data[64]}`:

| kind | direction | data |
|---|---|---|
| `CFG0` | host → table cores | `cfg0_t`: string/numeric, compare op, column page, groups, threshold, bins |
| `CFG1` | host → table cores | `cfg1_t`: 4 query bin indices, projected page and words, dictionary core, decode on/off |
| `QGROUP` | host → table cores | query-buffer address (bits 24+), 8 levels (23:0) |
| `KEY` | host → table cores | key word index (48+), 42 key bits |
| `LCFG` | host → dictionary core | `lcfg_t`: dictionary page, groups, entries, aggregate op, number of reporting table cores |
| `START` | host → all | number of rows (table cores) |
| `ERASE`, `PROG` | host → any core | block / (page, bit line, level): table loading |
| `HV_ROW`, `HV_WORD` | table → dictionary | row id; word index (63:52) and 42 unbound bits |
| `ETC_DONE` | table → dictionary | rows selected |
| `RES_ROW`, `RES_AGG`, `RES_DONE` | dictionary → host | `{src, row, key}`; `{op, value[40]}`; counts |

A numeric query's groups are stored at `bin * groups + group`. A string
query's groups are stored from address 0.

A typical query is a stream of host flits:
1. broadcast `QGROUP`s, `KEY`s, `CFG0` and `CFG1`;
2. `LCFG` to the decoding dictionary core, and `LCFG` with zero reporting
   cores to the others;
3. a broadcast `START`.

The answer is the results flits followed by `RES_DONE`.

## 6. Files

`rtl/` holds one unit per file:
- `hddb_pkg`: constants, flit and configuration types, Gray functions;
- `tlc_gray_codec`;
- `fenand_plane` (behavioural);
- `dbuf_mem`;
- `dbam_accumulator`;
- `bin_comparator`;
- `select_scratchpad`;
- `xor_unbind_array`;
- `agg_alu`;
- `etc_nsp`;
- `lud_nsp`;
- `htree_node`;
- `hddb_top`.

Each file opens with a description of its interface and timing. The parameter
defaults are the sizes of the described system:
- 16384 bit lines × 128 word lines × 128 blocks per plane;
- 50 µs sensing;
- 2 KB double buffer and 20 KB scratchpads;
- 42 XOR lanes, a 5-lane comparator and 2 ALU units;
- 4 cores per H-tree;
- 12 + 4 cores.

## 7. Simulation

Each `tb/tb_<unit>.sv` drives one unit, computes the expected outputs
independently (for DBAM, directly from the programmed levels with the
inequalities above), and ends with a `TB_RESULT checks=… failures=…` line. It
also has a cycle watchdog. Build and run one with plain Verilator, for
example:

    verilator --binary --timing --assert -Irtl -y rtl rtl/hddb_pkg.sv \
        tb/tb_etc_nsp.sv --top-module tb_etc_nsp -Mdir obj && obj/Vtb_etc_nsp

What the larger testbenches cover:

- **`tb_etc_nsp`** runs a string query and a numeric query over 1000 and 700
  rows (two windows). It checks every output flit, including the unbound HV
  bits, and forces batch overflows and output stalls.
- **`tb_lud_nsp`** decodes noisy HVs against a 600-entry dictionary. It checks
  row results, SUM and MAX across scratchpad flushes.
- **`tb_hddb_top`** is end to end at reduced size: 2 + 2 cores, 1024 bit lines,
  600 rows per table core. It loads the tables through the host port, then
  runs `SUM(price) WHERE category = …` and a numeric filter returning rows. It
  requires each mechanism to occur at least once: broadcast, multi-window scan,
  string and numeric mode, batch overflow, network stall, scratchpad flush,
  switch contention and host back-pressure.
- **`tb_hddb_workload`** runs the two query families used to evaluate the
  design: pure filters, and filters with aggregation. The table has 2 × 600
  rows, and one table cell in ten is programmed one level off. The 14 queries
  cover string equality, all six numeric comparisons and all five aggregates.
  Every result is compared with the exact SQL answer from the true values.
  The HVs are 128 cells per string column, per numeric level and per projected
  value; that is enough margin at this noise rate.
- **`tb_hddb_top_full`** runs the unmodified top: 16 full-size planes and 50 µs
  sensing. The query is a 16384-row string filter with SUM aggregation on
  every table core. The query takes about 7.5 million cycles (7.5 ms at 1 GHz),
  about 4 minutes of simulation, and needs about
  1.5 GB of memory in the simulator.

## 8. Where this model departs from, or goes beyond, the description

- **Protocol.** The window loop, the flit protocol, the query and key buffers,
  the slot limit and the packet switching are this model's own. The
  description gives the units, their sizes and the order of the steps, but
  not how they are sequenced.
- **Row selection.** For string predicates, the score threshold is left to the
  host. Numeric bin recall takes ties to the lower bin.
- **Capacity.** The plane geometry (16384 × 128 × 128 TLC cells, about 100 MB)
  is followed. The quoted 3 GB per core is not reachable with it.
- **Group size.** The table of parameters lists a string depth of 4, while the
  DBAM discussion uses groups of 8 cells; 8 is used.
- **System size.** The top has 16 cores, as in the overview drawing. The
  evaluated 150 GB and 1 TB systems (about 50 and 341 cores at 3 GB each)
  would need wider core ids than the 5 bits used here (30 cores at most). The
  tree also has only two switch levels.
- **Not modelled.**
  - Program and erase timing (0.2–0.8 ms per page) is not modelled, because
    loading is offline.
  - The under-array high-voltage circuits, the flash controller, the host
    software and the offline HDC encoder are outside the RTL. The testbenches
    play the host and generate encoded tables directly.
- **Value width.** Decoded keys are 16 bits, so aggregation works on keys or
  on values the host maps to dictionary indices.
