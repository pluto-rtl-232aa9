# pLUTo in RTL: table lookups performed by a DRAM bank

Many operations that are awkward to express as bitwise logic are easy to
express as a table: a population count, an S-box, a CRC step, a threshold or
a tone curve. pLUTo turns a DRAM subarray into a lookup engine for such tables.
The table is stored in a subarray, one row per entry, and each row holds its
entry repeated across the whole row. A second row holds the *query*: a vector
of small indices, one per element slot. The bank then opens the table rows one
after another (a *Row Sweep*). While row `i` is open, a comparator beside every
element slot checks whether that slot's index equals `i`. Where it does, the
bits of row `i` in that slot are kept. When the sweep ends, every slot holds
`table[index]`, computed for a whole 8 KB row at once. Sixteen subarrays do
the same thing in parallel on their own rows.

This repository holds synthesizable SystemVerilog for that mechanism: the match
logic, the Row Sweep sequencer, the three row-buffer variants, the ordinary
subarray operations that prepare operands, and the controller that runs a
small instruction set on top of them. The design follows the pLUTo proposal
(Ferreira et al., "pLUTo: Enabling Massively Parallel Computation in DRAM via
Lookup Tables"). The cell-level circuits are analog and are modelled only by
their logic function.

## A query, step by step

Take a 4-bit element width and a 16-entry table `T`:

1. The query row (the *source* row) is opened in the data subarray. Its row
   buffer now holds the index vector, e.g. `idx = {3, 0, 3, 1, ...}`. This
   takes tRCD.
2. The pLUTo-enabled subarray activates row 0. Its row buffer now holds
   `{T[0], T[0], T[0], ...}`. The match logic compares 0 with every index.
   Slot 1 matches, so its 4 matchlines go high, and `T[0]` is written into slot 1
   of the result.
3. The same happens for rows 1, 2, ..., 15. Row 3 fills slots 0 and 2, and
   row 1 fills slot 3. Every slot is written exactly once, by the row whose
   number equals its index.
4. The result is moved over the inter-subarray link (LISA row-buffer movement)
   into the data subarray's row buffer and stored in the destination row.

The cost is set by the table's length, not by the row width. A 256-entry
table needs 256 activations however many elements the row holds. At the
default 8 KB rows and 8-bit elements, one sweep computes 8192 lookups per
group, or 131072 over the 16 groups.

## The three row-buffer variants

The pLUTo-enabled subarray keeps the matched bits in one of three ways. The
parameter `DESIGN` (`DESIGN_BSA`, `DESIGN_GSA` or `DESIGN_GMC`) selects it.

| | BSA (buffered sense amplifier) | GSA (gated sense amplifier) | GMC (gated memory cell) |
|---|---|---|---|
| Where the result collects | a separate row of flip-flops (the *FF buffer*), written through matchline-controlled switches | the sense amplifiers; unmatched ones do not sense | the sense amplifiers; unmatched cells never reach the bitline |
| Precharge between rows | yes | no | no |
| Sweep latency, N rows | (tRCD + tRP) · N | tRCD · N + tRP | tRCD · N + tRP |
| Table after the query | intact | **destroyed** in unmatched slots | intact |

BSA is the default. It is the variant drawn in the proposal's overview, and
the only one that needs no change to the cell or sense amplifier, only added
flip-flops. GSA is faster, but every query erases the table except where it
matched. The model sets those cells to 0, so the table must be written again
before the next query. GMC is as fast as GSA and keeps the table; in silicon
it needs a two-transistor cell.

In RTL, BSA is `pluto_ff_buffer`. On every sense pulse it applies
`q <= (q & ~matchlines) | (row & matchlines)`, and it is cleared when a query
starts. For GSA and GMC the same update goes into the subarray's
sense-amplifier register. GSA also writes `row & matchlines` back into the
cells.

## Match logic

`pluto_match_logic` is purely combinational. For element width `W`, every
`W`-bit slot of the source row is compared with the current row index. Each
bit is an XNOR with the row index replicated across the row; the slot's `W`
XNOR bits are then AND-reduced and the result is broadcast back onto all `W`
matchlines of that slot. `W` is chosen at run time from 1, 2, 4, 8 or 16
(`ewidth_e`). One such network is built per width and the result is selected.
A row index wider than `W` bits matches nothing.

The proposal's area model counts one byte comparator per byte. Supporting five
widths is this design's choice. It lets 2-entry to 65536-entry tables use the
same hardware, although only up to 512 entries fit in a subarray.

## Row Sweep sequencer

`pluto_row_decoder` counts `row_idx` from 0 to `lut_size-1`. Each row is held
open for tRCD cycles, and `sense` is high in the last of them. For BSA a tRP
precharge follows every row. For GSA/GMC only one precharge follows the last
row. `busy` lasts exactly the formula's number of cycles, and `done` marks its
last cycle.

## The data subarray and the operand-preparation commands

Before a lookup, operands usually have to be packed into one index: the index
of a 4-bit add table is `a << 4 | b`. pLUTo relies on earlier in-DRAM
techniques for this. `pluto_data_subarray` implements them as DRAM commands
on whole rows:

| Command | Effect | Latency |
|---|---|---|
| `CMD_AAP` | copy row a to row b, optionally negated (RowClone; the negated form is Ambit's dual-contact row) | 2·tRCD + tRP |
| `CMD_TRA` | triple-row activation: rows a, b, c all become MAJ(a, b, c) (Ambit) | tRCD + tRP |
| `CMD_SHIFT` | row a shifted by 1 bit or 8 bits, left or right, into row b (DRISA) | 2·tRCD + tRP |
| `CMD_SWEEP` | open the source row (the sweep itself runs in the pLUTo-enabled subarray) | tRCD |
| `CMD_LISA` | receive a row over the inter-subarray link and store it | T_LISA + tRCD + tRP |
| `CMD_LOAD` | open row a and send it over the link into row b of a pLUTo-enabled subarray | T_LISA + tRCD + tRP |

The top six rows of every data subarray are reserved: T0, T1 and T2 are
Ambit's compute rows, C0 reads as all zeros, C1 reads as all ones, and DCC is
the negation row. AND is MAJ(a, b, 0) and OR is MAJ(a, b, 1). "Left" means
towards higher bit numbers, and element 0 sits at bit 0. The latencies of
these commands and `T_LISA = 8` are this design's estimates: the proposal
only names the techniques.

One data subarray holds both the source and the destination rows. The
proposal draws them as separate subarrays. Merging them changes no result
and no latency here, because the result still arrives through the row buffer.

## Subarray group and bank

`pluto_subarray_group` is one unit of subarray-level parallelism. It contains
one data subarray and `LUT_SA` (default 2) pLUTo-enabled subarrays, each
with its own match logic, sequencer and FF buffer. A `CMD_SWEEP` first opens
the source row and then starts the selected table subarray. A `CMD_LISA`
moves that subarray's result into the destination row.

`pluto_top` holds `GROUPS` (default 16) groups and the controller. Every
command goes to all groups at once, and the groups stay in lock step.
One row address therefore names the same row in every group: a
*row* seen by software is 16 × 8 KB = 128 KB. The activation-rate limit tFAW
is not enforced. The proposal's main evaluation also runs with it at zero.

## The controller and its instructions

`pluto_controller` has three parts:

- a register file of 16 *row registers* and 16 *subarray registers*
  (`pluto_regfile`);
- a command ROM (`pluto_cmd_rom`) that maps each instruction to a fixed list
  of commands;
- a state machine: decode, look up the operands, issue the commands one at a
  time, and report completion.

An instruction is an `instr_t`: `op, dst, src1, src2, lut` (register numbers),
`imm` and `bitw`.

| Instruction | Operands | Commands issued |
|---|---|---|
| `OP_ROW_ALLOC` | `dst` ← rows for `imm` bytes, element width `bitw` | none |
| `OP_SUBARRAY_ALLOC` | `dst` ← next free table subarray, `imm` rows | none |
| `OP_PLUTO` | `dst = T[src1]`, table `lut`, `imm` = table length, `bitw` = comparator width | SWEEP, LISA |
| `OP_NOT` | `dst = ~src1` | AAP src1→DCC, AAP ~DCC→dst |
| `OP_AND` / `OP_OR` | `dst = src1 & src2` / `src1 \| src2` | AAP ×3 into T0, T1, T2 (C0 or C1), TRA, AAP T0→dst |
| `OP_BIT_SHL/SHR`, `OP_BYTE_SHL/SHR` | shift `src1` in place by `imm` | SHIFT × imm |
| `OP_MOVE` | `dst = src1` | AAP |
| `OP_LUT_LOAD` | table `lut` entries 0..imm-1 ← data rows `src1` .. `src1`+imm-1 | LOAD × imm |

Allocation is done by the controller itself, with two bump pointers that are
reset only by `rst_n`. In the proposal an operating-system routine and an
in-memory table do this instead. The controller rejects an instruction with an
error code (`err_e`) in these cases:

- it uses an unallocated register;
- rows or table subarrays run out;
- a table is longer than its allocation or than `2^bitw`;
- `bitw` is not a supported width.

Handshake: `instr_valid`/`instr_ready`, then a one-cycle `instr_done` with
`instr_err`. Decoding takes one cycle. Each command takes one issue cycle plus
its DRAM time, and one cycle retires the instruction. A full-size `pluto_op`
with a 256-entry table under BSA takes
`1 + 1 + 17 + 34·256 + 1 + (8 + 17 + 17)` = 8766 cycles, or 7.3 µs at
DDR4-2400's 1.2 GHz command clock.

Tables and source data get into the bank through a row-wide host port on
`pluto_top` (`host_valid`, `host_we`, `host_group`, `host_target`,
`host_row`, `host_wdata`, `host_rdata`). It is accepted only while
`host_ready` is high. This port stands in for the memory channel and for
whatever DMA fills a table.

A table can also be loaded *from memory*, which is the proposal's cheap path
for a table that already exists in DRAM. Software keeps the table image in
ordinary data rows, one entry per row, each entry repeated across the row.
`OP_LUT_LOAD` then copies it row by row into the pLUTo-enabled subarray over
the LISA link: one `CMD_LOAD` per entry, so it costs `imm · (1 + T_LISA + tRCD + tRP)`
cycles. With GSA, software must issue this load (or write the table
again) after every query, because GSA's sweep destroys the table.

`OP_LUT_LOAD` is an instruction of this design, not of the published
instruction set. There, `pluto_subarray_alloc` takes a `lut_file` operand
and loads the table as part of allocation.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `ROW_BITS` | 65536 | bits per row (8 KB) |
| `ROWS` | 512 | rows per subarray; the largest table is 512 entries |
| `GROUPS` | 16 | subarrays working in parallel |
| `LUT_SA` | 2 | pLUTo-enabled subarrays per group (tables resident at once) |
| `NUM_ROW_REGS` | 16 | row registers |
| `T_RCD`, `T_RP` | 17, 17 | DDR4-2400 timings in clock cycles |
| `T_LISA` | 8 | row-buffer-to-row-buffer transfer (estimate) |
| `DESIGN` | `DESIGN_BSA` | row-buffer variant |

`ROW_BITS`, `ROWS`, `GROUPS`, `T_RCD` and `T_RP` are the proposal's
evaluated configuration. `LUT_SA`, the register counts and `T_LISA` are this
design's choices.

## What fits

At the defaults one table holds at most 512 entries, and element width equals
index width (1, 2, 4, 8 or 16 bits). That covers:

- 4-bit addition through a 256-entry table of 8-bit indices;
- 2-bit logic tables;
- 4- and 8-bit population counts;
- byte-indexed CRC, permutation and image-processing tables.

An 8-bit image of 936000 RGB pixels (2.8 MB) takes 22 queries of 128 KB.

A multiply of two 8-bit or two 16-bit fixed-point values needs a table of 2^16
or 2^32 entries. That fits in no subarray, so software must split it into
smaller tables. A table of 16- or 32-bit values under an 8-bit index, as in
CRC-16/32, must be split into 8-bit slices, one query per slice.

## How far to trust it

- **Follows the proposal:**
  - the query mechanism;
  - the matchline rule (all `N` lines of a slot high on an exact match, all
    low otherwise);
  - the FF-buffer write rule;
  - the three sweep-latency formulas;
  - the ISA's instruction set;
  - the controller's division into ROM, register file and state machine;
  - the sizes and timings in the parameter table.
- **This design's own:**
  - the encodings;
  - the command sequences inside each instruction;
  - the reserved-row layout;
  - latencies other than the sweep's;
  - how allocation works;
  - the host port;
  - clearing the result row at the start of a query;
  - 0 as the value left in cells GSA destroys;
  - the shared source/destination subarray.
- **Notes on the proposal's own text:**
  - It gives the GMC latency once as "tRCD + tRP × N". The RTL uses
    tRCD × N + tRP, which matches its statement that GMC needs no precharge
    between rows.
  - Its multiply-add example queries the multiply table as 256 entries at
    width 4, although shifting A by 4 and merging B makes an 8-bit index.
    Here a query needs `lut_size <= 2^lut_bitw`. The end-to-end test packs
    2-bit A and B into a 4-bit index and queries 16 entries at width 8. It
    queries the 256-entry add table at width 8, as the example does.
- **Not built:**
  - the analog cells, sense amplifiers and switches (only their logic is
    modelled);
  - the software library and compiler;
  - the OS allocation table;
  - tFAW throttling;
  - automatic reloading of GSA tables (software issues `OP_LUT_LOAD`);
  - loading tables from storage or computing them the first time.
- **Sizes:** everything is built at the proposal's full size. At that size
  the bank holds 16 × 3 × 512 × 8 KB = 192 MB of cell state as flip-flop
  arrays. This is a functional model of the array, not something to
  synthesize as is. Logic synthesis tools take a long time on the 65536-bit
  rows.

## Files

`rtl/pluto_pkg.sv` holds the shared types (`dram_cmd_t`, `instr_t`, `uop_t`,
enums for widths, opcodes, errors, reserved rows). Each other file is one
module named as above. The header comment of every file states its interface
and timing.

Testbenches in `tb/` are self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_pluto_<block>` tests one block, mostly at reduced row widths. Each
  compares against an independent bit-level reference and checks cycle
  counts.
- `tb_pluto_top` runs a compiled multiply-add program end to end on small
  BSA, GSA and GMC banks, plus logic, shifts, moves and every error. It counts
  each mechanism and fails if any never occurred.
- `tb_pluto_workloads` runs several kernels as instruction programs on a
  bank with 256-bit rows: 4-bit population count, XOR through a 4-entry
  table, image binarization, three-channel color grading, and CRC-8 over
  128-byte packets. The CRC builds XOR from OR, AND and NOT, then does one
  table query per byte. The binarization table is loaded from data rows
  with `OP_LUT_LOAD`.
- `tb_pluto_top_full` runs an 8-bit population count over 131072 random bytes
  on the bank at its default size. It checks every result and the sweep's
  8704 cycles. It takes about 2.5 minutes of simulation.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/pluto_pkg.sv \
          tb/tb_pluto_top.sv --top-module tb_pluto_top
./obj_dir/Vtb_pluto_top
```

Replace `tb_pluto_top` with any other testbench name. Lint with
`verilator --lint-only -Wall -y rtl rtl/pluto_pkg.sv rtl/pluto_top.sv`. It
reports only style points: replications wider than its default limit (the
65536-bit rows), row-address bits above the 9 a 512-row subarray uses,
register fields the current instructions never read, and the unused
word-line output of the sweep sequencer.
