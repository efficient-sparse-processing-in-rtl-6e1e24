# ESPIM: sparse matrix-vector products inside DRAM banks

Matrix-vector multiplication in machine-learning inference is limited by
memory bandwidth, not arithmetic. A DRAM bank can deliver a full 256-bit
column every few cycles, far more than the chip pins can carry out, so
processing-in-memory (PIM) designs in the style of Newton put one small
multiply-accumulate (MAC) datapath next to every bank. The vector lives in a
buffer shared by the channel and is broadcast 16 elements at a time; every bank
multiplies each broadcast slice with the matrix column it reads at the same
moment.

That scheme wastes almost everything when the matrix is pruned to 80-90 %
zeros. ESPIM keeps the idea but stores the matrix compressed and lets each
bank work on 11 matrix rows at once:

* a 256-bit column holds 11 non-zero cells (16-bit value plus 7-bit
  metadata), one for each of 11 *execution units* in the bank, so one
  broadcast slice is shared by 11 rows instead of one;
* the cell *indices* are stored ahead of their *values*, so each unit can
  prefetch indices into a small FIFO (iFIFO), pick the matching vector
  elements out of the broadcasts into a second FIFO (eFIFO), and multiply
  later, when the value arrives;
* the picking is done by a cheap 4x11 switch, used four times during the
  four cycles between column reads;
* all decisions that depend on the sparsity pattern (when to broadcast the
  next slice, when to hold it, where a FIFO would overflow or run dry) are
  made offline by a scheduler, *static data-dependent scheduling* (SDDS), and
  encoded in the command stream and in dummy cells. The chip itself has no
  sparsity control and no handshake between banks: all banks run in lockstep.

The RTL here is one ESPIM channel: a command decoder, the global (vector)
buffer, and 16 banks, each a behavioural DRAM array with the ESPIM datapath on
its column I/O. It also runs dense matrices in the Newton way on 16 MAC lanes
per bank (the "flexible" configuration).

## 1. Channel organisation

```
 host commands ──► cmd_decoder ──┬─ ACT/PRE/RD (all banks), WR (one bank)
 (valid/ready)                   ├─ LOAD-GB ─► global_buffer ── 256-b broadcast bus ──┐
                                 ├─ op, sub-cycle 0..3, dense mode ──────────────┐    │
                                 └─ RDRES bank b                                 ▼    ▼
                          ┌──────────── bank b (x16) ──────────────────────────────────┐
                          │ dram_bank_model ──256-b column──► espim_bank               │
                          │  32768 rows x 32 columns          slice latch, switch,     │
                          │                                   11 exec_unit, 5 dense    │
                          │                                   lanes, 2 output buffers  │
                          └────────────────────────────────────────────────────────────┘
```

| Module | Role |
|---|---|
| `espim_pkg` | geometry constants, `meta_t`, `pim_cmd_t`, command and bank-op encodings |
| `cmd_decoder` | accepts one host command at a time, enforces the DRAM timing by holding `cmd_ready_o` low, turns a column command into four sub-cycles |
| `global_buffer` | 32 x 256 bit = one vector-row of 512 bfloat16; broadcasts slice 0, 1, 2, … on successive COMP-BR, restarts at slice 0 on a result read |
| `dram_bank_model` | behavioural bank (open-row model, registered column read, timing assertions); not synthesizable, stands for the DRAM macro |
| `espim_bank` | slice latch, column latch, shared switch input stage, 11 execution units, 5 dense-only lanes, two output buffers |
| `exec_unit` | iFIFO, eFIFO, extraction control, one bfloat16 MAC, two fp32 accumulators |
| `ififo`, `efifo` | 8-entry in-order FIFOs |
| `vec_switch` | the simplified 4x11 switch |
| `bf16_mac` | bfloat16 x bfloat16 + fp32, rounded to nearest even |

## 2. What a column holds

A matrix is cut into *vector-rows* of 512 columns (the size of the global
buffer) and, across rows, into *row groups* of 16 banks x 11 units x 2 = 352
rows (two rows share a unit, see section 6). For each (row group, vector-row)
pair the scheduler produces one stream of columns per bank; all banks read
the same column address at the same time.

Sparse compute column (COMP-BR, COMP-NoBR), 256 bits:

| bits | content |
|---|---|
| `[16u+15:16u]`, u = 0..10 | value D*u* for unit *u* (bfloat16), or +0 as a dummy |
| `[176+7u+6:176+7u]`, u = 0..10 | metadata I*u* for unit *u*, `{select, start, valid, index[3:0]}` |
| `[255:253]` | unused |

The value and the metadata in the same column belong to *different* cells:
the metadata is the index of a cell whose value comes several columns later
(decoupled prefetch). The 4-bit index is the position of the matching vector
element inside its 16-element slice; which slice it belongs to is not stored,
it follows from the order of the stream (the start bit marks the first entry
of a new slice).

Metadata bits:

* `valid = 0, start = 1` — *invalid start entry*: this unit has no cell in
  the slice; it only marks the slice boundary.
* `valid = 0, start = 0` — *placeholder*: never stored; the scheduler puts it
  where the unit's iFIFO is full or its stream is exhausted.
* `select` — which of the two output buffers the product goes to.

Index-only column (LOAD-IDX): 33 seven-bit fields, field 11*s*+*u* at bits
`7(11s+u)`, offered to unit *u* in sub-cycle *s* (s = 0, 1, 2). It fills the
iFIFOs three entries at a time before values arrive.

Dense column (flexible mode): 16 bfloat16 values, lane *l* at bits
`[16l+15:16l]`, multiplied with element *l* of the slice broadcast with it.
Values D0..D10 sit where the sparse layout has them, so only the MAC's vector
input needs a multiplexer between the modes.

## 3. Commands and timing

| `cmd_op_e` | Command | Effect | Ready again after |
|---|---|---|---|
| `CMD_ACT` | ALL-ACT row | opens `row` in every bank | tRCD = 10 |
| `CMD_PRE` | PRE | closes the row in every bank | tRP = 10 |
| `CMD_WR` | WR bank, col, data | ordinary write, used to load the matrix | tCCD = 4 |
| `CMD_LOAD_GB` | LOAD-GB chunk, data | writes 256 bits into the global buffer | 1 |
| `CMD_LOAD_IDX` | LOAD-IDX col | column read, pushes up to 3 metadata per unit | tCCD |
| `CMD_COMP_NOBR` | COMP-NoBR col | column read + compute, *no* new broadcast (stall; latched slice reused) | tCCD |
| `CMD_COMP_BR` | COMP-BR col | column read + compute + broadcast of the next slice | tCCD |
| `CMD_RDRES` | RDRES bank | bank's 2 x 16 fp32 buffers on `res_o` next cycle, then cleared with its FIFOs | 1 |
| `CMD_MODE` | mode | `dense = 1` selects the Newton-style dense datapath | 1 |

A command is taken on `cmd_valid_i && cmd_ready_o`. For a column command
accepted at edge *t*, the bank's column arrives (registered read) and the
broadcast slice is driven at *t*+1, and the datapath sees `sub = 0, 1, 2, 3` at
*t*+1 … *t*+4. Back-to-back column commands therefore run at exactly one per
tCCD = 4 cycles. The decoder also holds back a PRE until tRAS = 24 cycles
after the ALL-ACT and tRTP = 5 after the last column read, and a column read
until tCCD + tWTR = 9 cycles after a WR (so `cmd_ready_o` depends on the
offered opcode). A change of DRAM row therefore costs
max(tRTP, tRAS − time since ACT) + tRP + tRCD = 25 cycles or more between
the last column read of one row and the first of the next; a full row of 32
column reads takes 128 cycles, so the row change adds about 20 %.
ACT and PRE always address all banks (all-bank activation), which removes
Newton's staggered per-group activation overhead.

## 4. Inside a column command: the execution unit

This is the part whose exact timing the offline scheduler must mirror.
During the four sub-cycles of COMP-BR or COMP-NoBR each unit does:

**Sub-cycle 0, compute.** The column's value D*u* is multiplied with the
eFIFO head *as it was before this command* and added into output buffer
`head.select`; the head is popped. If the eFIFO is empty nothing is added:
the scheduler knew and placed a zero value there.

**Sub-cycle 0, index push.** Metadata I*u* is offered to the iFIFO.
Placeholders are discarded, and so is any entry offered to a full iFIFO
(fullness judged before the same cycle's pop). An entry pushed into an empty
iFIFO is visible at its head in the same cycle (write-through), so a column's
own index can already match the slice broadcast with it.

**Sub-cycles 0..3, extraction.** In sub-cycle *i* the switch offers the element
of the current slice at position `4i + head.index[1:0]`, and a hit when
`head.index[3:2] == i`. The head entry is retired when it belongs to the
current slice and either

* it is valid, hits, and the eFIFO can accept (not full, or popping in the same
  cycle): the element, tagged with the entry's select bit, is written to the
  eFIFO; or
* it is invalid (a slice without cells): it is retired without writing.

"Belongs to the current slice" is decided with the start bit and a one-bit
flag `took` per unit:

* in COMP-BR (a new slice) the first entry retired must carry `start = 1`;
  after that only `start = 0` entries are retired;
* in COMP-NoBR (stalled broadcast, same slice) only `start = 0` entries are
  retired; an entry with `start = 1` belongs to a later slice and waits.

Because the iFIFO is strictly in order, one entry per sub-cycle at most is
retired, and two consecutive entries in the same index range cannot both be
served in one command: the second waits for the next command (a stall if the
slice has to stay).

**LOAD-IDX** pushes field *s* of each unit in sub-cycle *s* (s = 0, 1, 2) and
does nothing else.

**Dense mode.** COMP-BR multiplies lane *l*'s value with element *l* of the
slice broadcast with the column and adds into buffer 0; the FIFOs stay idle.
Lanes 11..15 exist only when `FLEXIBLE = 1`.

## 5. The simplified switch

A full 16x11 crossbar (any of 16 elements to any of 11 units) is avoided.
The bank has one 16-to-4 group selector that in sub-cycle *i* passes elements
4*i*..4*i*+3 of the latched slice, and each unit has one 4-to-1 multiplexer
steered by the two low bits of its iFIFO head index plus a 2-bit comparator
of the high bits against *i*. Each unit thus reads at most one iFIFO entry
and writes at most one eFIFO entry per cycle, so both FIFOs are single-ported,
and a unit can still collect up to four elements of one slice if its indices
fall in different ranges. The scheduler reorders each unit's cells within a
slice (sweeping ranges 0, 1, 2, 3, 0, 1, …) so that consecutive entries use
different ranges; for indices 2, 3, 5, 6 this turns one broadcast plus two
stalls into one broadcast plus one stall.

## 6. Load balancing and the select bit

Rows of a row group are sorted by non-zero count and dealt round-robin to the
banks (greedy balancing). Inside a bank, the densest and the sparsest row
share unit 0, the next pair unit 1, and so on; the two rows' cells are merged
in increasing column order and each cell's `select` bit says which row it
belongs to. Each bank therefore has two output buffers of 16 fp32 entries
(entries 11..15 of buffer 1 are unused and always zero). The select bit
travels with the element through the eFIFO, so the MAC needs no other
bookkeeping.

## 7. What the offline scheduler guarantees

The hardware trusts the command stream completely. A correct stream must:

1. issue COMP-BR for a slice only when every unit of every bank has retired all
   entries of the previous slice and will retire the start entry of the new
   one during that command; otherwise issue COMP-NoBR (broadcast stall);
2. put a placeholder wherever a unit's iFIFO will be full or its stream is
   exhausted, and give every slice without cells an invalid start entry;
3. put a zero value wherever a unit's eFIFO will be empty at compute time,
   and put each real value exactly where its element is at the eFIFO head;
4. use LOAD-IDX to get indices ahead of values (the test scheduler uses it at
   the start of a pass only);
5. keep a pass within the 32-column DRAM rows of the matrix area, with PRE and
   ALL-ACT in between, and end it with one RDRES per bank.

The testbenches contain such a scheduler (`tb/sdds_pkg.sv`): it simulates the
units with the rules of section 4, chooses each column's kind and emits the
packed columns. `tb/espim_host_body.svh` adds the host: random matrix, load
balancing, writing the columns into the banks, loading the vector-row,
replaying the stream and adding the partial sums of successive vector-rows.

## 8. Number formats

Values and vector elements are bfloat16; each unit accumulates in fp32. The
product of two bfloat16 numbers is exact in fp32 precision before the
addition; the sum is rounded to nearest even; subnormal inputs and results
are flushed to zero; overflow gives infinity; NaN is not treated specially.
A result of a whole matrix row is obtained by the host adding the partial sums
of all vector-rows (and, in dense mode, the 16 lane sums of a bank).

## 9. Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `espim_channel` | `N_BANKS` | 16 | banks per channel |
| | `ROWS`, `COLS` | 32768, 32 | DRAM rows per bank, 256-bit columns per row |
| | `FIFO_DEPTH` | 8 | entries of every iFIFO and eFIFO |
| | `FLEXIBLE` | 1 | build the 5 dense-only lanes per bank |
| | `T_RCD`, `T_RP` | 10, 10 | activation and precharge times (cycles) |
| | `T_RAS`, `T_RTP`, `T_WTR` | 24, 5, 5 | ACT→PRE, read→PRE, write→read (cycles) |
| `espim_pkg` | `T_CCD`, `N_SPARSE`, `SLICE`, `COL_BITS` | 4, 11, 16, 256 | fixed by the column format |

The defaults are the HBM2E-like numbers of the design (16 banks, 32K rows of
1 KB, 256-bit column I/O, 8-entry FIFOs, tCCD 4, tRCD 10, tRP 10, tRAS 24,
tRTP 5, tWTR 5). Changing
`N_SPARSE` or `SLICE` changes the column format and is not supported.

## 10. Capacity and work for the LLaMA-7B layers

One channel holds 16 x 32768 x 32 x 32 B = 512 MiB. A sparse matrix with
*nnz* non-zeros needs at least *nnz*/11 columns of 32 B, plus dummy columns
inserted by the scheduler. At 90 % sparsity a 4096 x 4096 attention matrix
needs ≥ 4.7 MiB and an 11008 x 4096 feed-forward matrix ≥ 12.5 MiB, so every
single layer fits in one channel with large margin. The full model
(30 x (4 x 4096² + 3 x 11008 x 4096) ≈ 6.07 G weights) needs ≥ 1.6 GiB at 90 %
sparsity and ≥ 8.2 GiB at 50 %, i.e. 4 or more channels of a stack. A
4096-element vector is 8 vector-rows, processed one after the other.

`tb_espim_llama` runs such an attention matrix at 90 % sparsity (integer
values, rows rounded up to 12 row groups): 14,885 column commands (3,072
broadcasts, 11,621 broadcast stalls, 192 index-only reads) for the whole
product, against 67,584 column reads a dense 16-lane-per-bank datapath
would need for the same 4224 rows, about 4.5 times fewer. Stalls outnumber
broadcasts because each unit takes one cell per column read: with two rows
per unit at 10 % density a unit has 3.2 cells per slice on average, so every
broadcast is followed by about 2.2 stalled reads in any case. The lower bound
is 9,830 column commands; the remaining 50 % come from uneven rows and the
FIFO limits as handled by the testbench's scheduler (index prefetch only at
the start of a pass).

At 50 % sparsity (`tb_espim_sparsity50`) one 352 x 512 pass takes about 600
column commands (32 broadcasts, 565 stalls, 2 index-only reads) against the
704 a dense datapath needs for the same rows. Each unit multiplies at most
one cell per column read, so a bank consumes at most 11 non-zeros per column
(the lower bound here is 512 columns), while a dense column carries 16 cells
of which half are useful at this density: the gain from skipping zeros
nearly cancels, as expected at the low end of the sparsity range.

## 11. Simulating

Everything is plain SystemVerilog-2017 and runs in Verilator 5 (2-state). The
channel with its default parameters and the end-to-end test:

```
verilator --binary -j 4 -Wno-fatal -Itb --top-module tb_espim_full \
  rtl/espim_pkg.sv rtl/bf16_mac.sv rtl/ififo.sv rtl/efifo.sv rtl/vec_switch.sv \
  rtl/exec_unit.sv rtl/espim_bank.sv rtl/global_buffer.sv rtl/cmd_decoder.sv \
  rtl/dram_bank_model.sv rtl/espim_channel.sv \
  tb/fp_ref_pkg.sv tb/sdds_pkg.sv tb/tb_espim_full.sv
obj_dir/Vtb_espim_full
```

Use `--top-module tb_espim_channel` with `tb/tb_espim_channel.sv` for the
smaller two-bank, multi-pass test, and `tb_<module>.sv` with the module's own
files for a unit test. Every testbench ends with a line
`TB_RESULT checks=<n> failures=<m>`.

## 12. Verification

| Testbench | What it checks |
|---|---|
| `tb_bf16_mac` | 4000 products/sums against a real-number reference with rounding to nearest even, plus corner cases |
| `tb_ififo`, `tb_efifo` | random push/pop against a queue model: write-through, placeholder dropping, full/empty behaviour |
| `tb_vec_switch` | every slice position and range for all units |
| `tb_exec_unit` | the index examples used to explain the design (reordered indices 2, 5, 3, 6; two rows sharing a unit with select bits), random streams, dense mode |
| `tb_espim_bank` | one bank with a scheduler-generated stream, sparse and dense |
| `tb_global_buffer`, `tb_cmd_decoder`, `tb_dram_bank_model` | pointer/restart; command spacing for every timing constraint; open-row reads and writes |
| `tb_espim_channel` | 2 banks, 2 row groups x 2 vector-rows (88 x 256 matrix) plus dense passes |
| `tb_espim_full` | default channel: 16 banks, 352 x 512 matrix at 2-20 % row density, plus dense passes |
| `tb_espim_sparsity50` | default channel: 352 x 1024 at 45-55 % row density (the dense end of a 50-90 % sparsity range) |
| `tb_espim_llama` | default channel: a whole 4096 x 4096 attention projection (rounded up to 4224 rows) against a 4096-element vector at about 90 % sparsity, 96 passes |

The end-to-end tests compare every output with the exact inner product
(integer-valued data, so the fp32 result must be exact), check that column
commands are spaced exactly 4 cycles apart, that every row change takes
exactly the time the DRAM timing allows,
and fail if any mechanism never occurred: COMP-BR, COMP-NoBR, LOAD-IDX,
placeholders, compute with an empty eFIFO, select = 1 cells, invalid start
entries, several cells of one unit in one slice, a pass crossing a DRAM row,
the dense mode. The full-size run takes 167 column commands (32 broadcasts,
133 stalls, 2 prefetch columns) for one 352 x 512 pass, about 11,600 cycles
including loading. Each unit test was also run against a copy of its module
with one deliberate bug, and caught it.

## 13. Departures and open points

The published ESPIM architecture describes the datapath, the layout, the
commands and the scheduling rules, but not their cycle-level detail. Where
this RTL had to decide, or differs, it is listed here.

* **Number format.** The design description mentions both FP16 and bfloat16
  values; bfloat16 is used. fp32 accumulation, round-to-nearest-even and
  flush-to-zero are this design's choices.
* **Cycle-level semantics** of a column command (section 4), the index-only
  column packing, the metadata bit order below the start/select bits, the
  command encoding and the mode command are this design's own.
* **Results per pass, not per DRAM row.** Newton reads results at the end of
  every DRAM row; here the output buffers accumulate over a whole (row group,
  vector-row) pass, which may span several DRAM rows, and are read once.
* **Dense mode** keeps 16 separate lane sums per bank that the host adds;
  no in-bank adder tree.
* **Timing** is enforced by the decoder holding `cmd_ready_o` low instead of by
  the host (tCCD, tRCD, tRP, tRAS, tRTP, tWTR). tRRD does not arise with
  all-bank activation; tWTR is counted from the end of the write's column
  slot; refresh is not modelled (the host would schedule it between rows).
* **DRAM array** is a behavioural model with sparse storage, so the top is
  not synthesizable as a whole; the datapath modules are.
* **Power gating** of the part of the datapath unused in each mode is not
  modelled.
* **Not built:** the offline scheduler (software; a behavioural version is in
  the testbenches), the host memory controller, and the other channels of a
  stack.
