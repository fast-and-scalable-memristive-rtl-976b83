# Column-skipping in-memory sorter

This is SystemVerilog for a sorter that keeps its data in a memristive (1T1R
RRAM) array and sorts it in place. It never moves the elements to a separate
comparator network. It finds the smallest remaining element again and again
by reading the array one bit column at a time. Each column read tells which
candidate rows can still be the minimum.

A plain bit-traversal sorter reads all W columns for every element, so it
needs W cycles per number (32 for 32-bit data). This design records where
earlier searches split the candidates. A later search restarts from such a
record and skips the columns above it. Leading zeros, clustered data and
repeated values then cost far fewer column reads. The array can also be cut
into several banks that run in lockstep as one sorter.

The design follows the published description of the column-skipping sorter
by Yu, Jing, Yang and Tao (Peking University, "Fast and Scalable Memristive
In-Memory Sorting with Column-Skipping Algorithm"). Where that description
is silent or contradicts itself, the choices made here are listed in
[Departures and choices](#departures-and-choices).

Default size: N = 1024 elements of W = 32 bits, K = 2 state records, one bank.

## The minimum search

Every row of the array holds one unsigned element, with its MSB in the
leftmost column. A wordline register per row marks the rows that are still
*active*, meaning they can still be the minimum. One search works like this:

1. Drive the bitline of column `c`. The sense amplifiers return bit `c` of
   every row.
2. Look only at the active rows. If they all read 0 or all read 1, the column
   separates nothing, so nothing changes. Otherwise every active row that read
   a 1 is larger than some row that read a 0, so those rows are *excluded*:
   `wl &= ~bits`. This step is called row exclusion (RE).
3. Step to column `c-1`. After column 0, the active rows all hold the minimum.

One column read (CR) takes one clock cycle. The minimum's row leaves the
sorter, is marked *sorted*, and the next search starts.

## Column skipping: state records

The first search that starts at the MSB keeps a record of each column where
a row exclusion happened. A record is the pair (wordline state just before
the exclusion, column). The table holds only the K most recent records. When
it is full, the oldest record is dropped.

When the next search starts and the table is not empty, the most recent
record is taken out of the table. Its wordline state, minus the rows already
sorted, becomes the active set. The search then continues from the recorded
column. It does not start at the MSB, and it makes no new records. When the
table is empty, the search starts at the MSB again with every unsorted row
active, and it refills the table.

Why this is correct: a record at column `s` holds the rows that share the
bits above `s` with the minimum that was found. Every unsorted row outside
that set was excluded at some higher column. So it has a 1 where the set has
a 0 and is larger than every row in the set. The set also still contains
unsorted rows: the rows excluded at column `s` itself cannot have been
sorted yet. So the next minimum is always inside the reloaded set.

Worked example, the array {8, 9, 10} with W = 4 and K = 2:

| search | starts at | columns read | records after | emits |
|---|---|---|---|---|
| 1 | MSB, all rows | 3, 2, 1 (RE, record {8,9,10}@1), 0 (RE, record {8,9}@0) | 2 | 8 |
| 2 | record {8,9}@0, minus 8 | 0 | 1 | 9 |
| 3 | record {8,9,10}@1, minus 8, 9 | 1, 0 | 0 | 10 |

That is 7 column reads, against 12 without skipping. The testbench checks
this exact count.

A record is loaded at the clock edge that ends the previous search, so a
load costs no cycle. A record made on column 0 that is reloaded straight
away passes directly from the recording path to the loading path. It never
takes a table entry, so it does not push out an older record.

## Repeated values: the stall

If several rows are still active after column 0, they all hold the same
minimum. They leave one per cycle, lowest row index first. The column
processor is stalled meanwhile, so there are no extra column reads. The next
search starts after the last copy has left. The first copy leaves in the
cycle that reads column 0.

The sorting time is therefore the number of column reads plus one cycle for
each extra copy of a repeated value.

## Hardware blocks

| module | role |
|---|---|
| `rram_bank` | behavioural model of one 1T1R bank: cells, bitline and selectline drivers, sense amplifiers. Column read (one-hot bitline enable to one bit per row), plus a row write port and a row read port |
| `column_processor` | one-hot column register. `cen` steps it right, `len` loads a recorded column, `to_msb` restarts it. Its bits drive the bitline drivers |
| `row_processor` | wordline registers with a load multiplexer, the exclusion gate per row, the row controller (does some active row read 1? read 0?), the sorted flags, and the choice of the lowest candidate row |
| `state_controller` | K-entry stack of (wordline state, column state). Push on `sen`, pop on `len`, oldest dropped when full |
| `sort_controller` | per-bank sequencer with four phases: IDLE, RUN (column reads), STALL (repeated minima leave), DONE. It allows recording only in searches that started at the MSB |
| `sub_sorter` | one bank with its own near-memory circuit: the five blocks above |
| `multibank_manager` | combines the banks' local operation bits into the synchronised ones, counts candidates across banks, chooses the bank whose row leaves, ends searches |
| `cs_sorter` | top level: N/NS sub-sorters and the manager, the programming port, registered output |
| `cs_pkg` | shared types: operation-bit bundles, the candidate count, the phase encoding |

## Several banks

With `NS < N` the array is split into C = N/NS banks. Each bank has its own
near-memory circuit and its own record table. Every cycle each bank reports
its *local operation bits*:

- `cen`: it wants to step to the next column.
- `has_one` / `has_zero`: some active row in this bank read a 1 / a 0.
- `sen`: recording is allowed, because the search started at the MSB.
- `len`: its record table is not empty.

Each bank then obeys only the *synchronised* bits from the manager:

- `ren = any has_one AND any has_zero`. Whether a column separates anything
  is decided over the whole array, not per bank. A bank whose active rows
  all read 1 still excludes them if another bank has an active 0.
- `sen = ren AND any sen`.
- `cen` = OR of the banks' `cen`.
- `len` = OR of the banks' `len` (or a record made this cycle), at the end
  of a search.

All banks therefore record, load and step together. Their record tables
always hold the same number of entries. A bank's slice of a record may be
empty.

At the end of a search each bank reports how many candidates it has, as
none, one or more than one. It reports this both with and without this
cycle's exclusion; the manager chooses with its own `ren`, which keeps the
bank-to-manager paths free of combinational loops. The manager adds the
counts up. The lowest-numbered bank that has a candidate is selected, and
its lowest candidate leaves through the output multiplexer as global index
`bank*NS + row`. The search ends when the total was at most one. Banking
does not change the cycle count: it equals the single-bank sorter's exactly.
The sweep testbench checks this for NS = 64, 256 and 512.

## Interface and timing of `cs_sorter`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `prog_en`, `prog_addr`, `prog_data` | in | 1, log2 N, W | write one element per cycle while idle |
| `start` | in | 1 | one-cycle pulse: sort the N stored elements |
| `busy` | out | 1 | a sort is running |
| `out_valid`, `out_idx`, `out_val` | out | 1, log2 N, W | next element in ascending order, with its row |
| `done` | out | 1 | rises with the last `out_valid`, holds until the next `start` |

Parameters: `N` (1024), `W` (32), `K` (2), `NS` (1024; NS must divide N).
Outputs are registered. They appear one cycle after the cycle in which the
minimum was found. All N rows take part in every sort.

## Measured behaviour

These figures come from simulating the default 1024 x 32 sorter. The speed-up
is relative to 32 cycles per number.

| data (1024 elements) | K=1 | K=2 | K=3 | K=4 | K=10 |
|---|---|---|---|---|---|
| uniform 0..2^32-1 | 1.16 | 1.19 | 1.19 | 1.17 | 1.15 |
| normal, mean 2^31, sd 2^31/3 | 1.17 | 1.21 | 1.20 | 1.19 | 1.15 |
| two clusters at 2^15 and 2^25, sd 2^13 | 1.70 | 2.08 | 2.25 | 2.32 | 2.30 |
| small repeated weights (Kruskal-like) | 8.7 | 10.2 | 10.9 | 11.3 | 10.9 |
| 8 key groups (MapReduce-like) | 10.9 | 12.5 | 14.8 | 13.0 | 13.2 |

The published best speed-ups over all k for the first three data sets are
1.21, 1.23 and 2.22, close to these; the published trend (a peak near k = 2
or 3, then a slow decline for uniform and normal data) shows here too. The last two rows use data made up here,
because the original application data sets are not available. They only
show that repeated values are cheap.

## Departures and choices

- **Where a reloaded search restarts.** The written description says a
  reloaded search starts at the column *below* the recorded one. The
  published worked example instead reads the recorded column again and
  counts 7 column reads for {8, 9, 10}. This design follows the example.
  It stores the *active* rows at the recorded column, not only the rows
  excluded there, and restarts at that column. Storing only the excluded
  rows loses data when a reloaded search leaves rows behind. For example,
  {0, 2, 3, 4} with W = 3 and K = 2 would then emit 4 before 3.
- **Leading zeros** are skipped only through the records. A search that
  starts at the MSB still reads every leading all-zero column, one cycle
  each, because the flow of operations has no separate leading-zero
  detector.
- **Record and load in the same cycle** use a bypass, as described above.
- **Sorted flags** are a register per row. Reloaded states are masked with
  them.
- **Order of equal values** is lowest bank first, then lowest row.
- **The all-0's-or-1's decision in multi-bank mode** uses two flags per
  bank (`has_one`, `has_zero`). One flag per bank cannot be combined into
  the global decision.
- **The programming port, row read port, reset behaviour and registered
  output** are this design's own. The published description covers only
  the sorting datapath.
- **Not modelled:** analog behaviour of the RRAM cells and sense amplifiers
  (`rram_bank` is a bit-level model); signed and floating-point formats,
  which the description mentions only as possible extensions; clock-rate
  effects of a large multi-bank manager (the manager here is purely
  combinational).

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb_rram_bank` | column and row reads against a copy of the data |
| `tb_column_processor` | reset, stepping, load, priorities |
| `tb_row_processor` | random stimulus against a per-row model |
| `tb_state_controller` | push, pop, dropping the oldest, bypass, clear, against a queue model |
| `tb_sort_controller` | phase sequence for every scheduling case |
| `tb_sub_sorter` | one bank sorting random data, including repeated values; order and cycle count |
| `tb_multibank_manager` | random inputs against a behavioural model of the synchronisation and selection |
| `tb_cs_sorter` | end to end. A 64 x 12 sorter in 4 banks sorts five data sets, and the 3 x 4 example must take 7 cycles. It counts recordings, loads, exclusions, skipped columns, stalls, repeats spread over banks, dropped records and outputs from every bank, and fails if any never happened |
| `tb_cs_sorter_full` | the default 1024 x 32 sorter on the five data sets |
| `tb_cs_sweep` | ten full-size sorters (K = 1..10, NS = 64/256/512) side by side |

The cycle counts are compared with `sort_ref_pkg`. This is a behavioural
model of the search over lists of row numbers, and it shares no structure
with the RTL.

To simulate with Verilator, for example the full-size test:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/cs_pkg.sv tb/sort_ref_pkg.sv tb/tb_cs_sorter_full.sv --top-module tb_cs_sorter_full
./obj_dir/Vtb_cs_sorter_full
```

Every test runs in seconds. The sweep takes about 20 s to build.

The RTL also carries a few concurrent assertions: the column state is
one-hot, a load always has a record to load, all banks stay in lockstep, and
at most one bank is selected per cycle. Build with `--assert` to check them.
