# MIMDRAM: fine-grained processing-using-DRAM in SystemVerilog

Processing-using-DRAM (PuD) computes inside the DRAM array: activating three
rows at once makes the sense amplifiers settle to the bitwise majority of the
three, and activating a second row while the first is still open copies one
row into the other. Chained, those two primitives give bit-serial arithmetic on
every column of a row at once. Earlier PuD designs always activate a whole
DRAM row (65,536 columns across the eight chips of a rank), so a loop with a
few thousand elements leaves most of the row idle, and only one operation can
run per subarray at a time.

MIMDRAM works at the granularity of the **mat**, the 512-column tile a DRAM
row is physically cut into. Each mat latches its own row address, so
different groups of mats ("mat ranges") can hold different rows open and run
different operations at the same time: one subarray becomes a
multiple-instruction, multiple-data machine. Two small interconnects move data
between columns: between neighbouring mats through the global sense
amplifiers (GB-MOV), and between columns of one mat through the helper
flip-flops of the local I/O (LC-MOV). These moves are what vector reductions
need. A control unit in the memory controller schedules the incoming bulk
bitwise operations (bbops) onto free mat ranges and runs up to eight of them
at once.

This repository holds RTL for the DRAM-side changes (mat selection, the
per-chip mat queue, the interconnects), a behavioural model of the mat array,
the memory-controller control unit and the mat translation table. They are
wired into one system top, `mimdram_top`.

## Configuration

Every default matches the evaluated system:

| parameter | default | meaning |
|---|---|---|
| `CHIPS` | 8 | chips on the rank, all on one command bus |
| `MATS` | 16 | mats per chip in the PuD subarray, so 128 mats in the module |
| `ROWS` | 1024 | rows per mat |
| `COLS` | 512 | columns (bitlines) per mat |
| `N_PE` | 8 | micro-program engines in the control unit |
| `BUF_DEPTH` | 1024 | bbop buffer entries (2 KB at 2 bytes per entry) |
| `QDEPTH` | 8 | mat queue entries per chip |
| `MTT_ENTRIES` | 512 | mat translation table entries (2 KB at 32 bits) |
| `T_RAS`, `T_RP`, `T_WR` | 39, 16, 18 | DDR4-2400 timings in 1.2 GHz command clocks |
| `T_RELOC` | 4 | cycles to move a column group through the global row buffer (this design's value) |

A logical mat index is 7 bits: the upper 3 bits are the chip and the lower 4
bits the mat inside that chip. A mat range is `{mat_begin, mat_end}`, 14 bits.
The top asserts `CHIPS*MATS == 128` and `MATS == 16`, because the range
encoding depends on it. `ROWS`, `COLS` and `BUF_DEPTH` can be reduced for fast
simulation.

## The mat and its rows

`dram_mat` is a behavioural model of one mat: a cell array, the local row
buffer (sense amplifiers) and four helper flip-flops (HFFs). Its rows have
fixed roles:

| local address | use |
|---|---|
| 0 .. ROWS-19 | data rows (1006 at the default size) |
| ROWS-18, ROWS-17 | C0 and C1: constant all-zeros and all-ones rows |
| ROWS-16 .. ROWS-1 | B0 .. B15: compute addresses decoded to 1, 2 or 3 rows |

The B addresses drive six physical compute rows: four plain rows T0..T3 and
two dual-contact rows DCC0 and DCC1. A dual-contact row can be reached through
its normal wordline or through a negated one, which reads and stores the
complement. `local_row_decoder` maps the B addresses as follows:

| B | rows | B | rows |
|---|---|---|---|
| B0..B3 | T0..T3 | B8 | T0, T1, T2 |
| B4 | DCC0 | B9 | T1, DCC0, DCC1 |
| B5 | !DCC0 | B10 | T2, T3, !DCC0 |
| B6 | DCC1 | B11 | T0, T1 |
| B7 | !DCC1 | B12 | T2, T3 |
| | | B13 | T1, T2, T3 |
| | | B14 | DCC0, T1, T2 |
| | | B15 | DCC1, T0, T3 |

The mat model behaves like this:

* **ACT on a closed mat.** The raised rows charge-share. With three rows the
  row buffer takes the bitwise majority, which is written back into all three
  rows. That is the triple-row activation, the only logic primitive.
* **ACT on an open mat.** The row buffer already holds data, so it overwrites
  the newly raised rows. This is RowClone, the second half of an AAP
  (ACTIVATE-ACTIVATE-PRECHARGE).
* **RD.** Copies the 4-bit column group `col` of the row buffer into the HFFs.
  With `hff_hold` set, HFF enable stays high.
* **WR.** Writes a column group into the row buffer and into the open rows.
  While HFF enable is held, the data come from the HFFs, not from the global
  I/O. This is the intra-mat move.

The table was chosen so that the full adder below needs only one address per
activation.

## Bit-serial addition

Operands are stored vertically: bit *i* of every element of a vector is in
row `base+i`, one element per column. An n-bit addition takes 8n+2 AAP/AP
operations. The engine's sequence, with Cin kept in DCC1, is:

```
init:           AAP C0      -> B6  (DCC1 = 0)
for each bit i: AAP B[i]    -> B8  (T0,T1,T2 = B)
                AAP A[i]    -> B4  (DCC0 = A)
                AAP B6      -> B3  (T3 = Cin)
                AP  B9             (T1,DCC0,DCC1 = MAJ(B, A, Cin) = Cout)
                AP  B10            (T2,T3,!DCC0 = MAJ(B, Cin, !Cout))
                AAP B7      -> B0  (T0 = !Cout)
                AAP A[i]    -> B1  (T1 = A)
                AAP B8      -> Y[i] (Y = MAJ(!Cout, A, MAJ(B, Cin, !Cout)) = sum)
final:          AAP B6      -> Y[n] (carry out)
```

The first AP leaves the carry in DCC1, ready for the next bit. It also stores
the carry in DCC0 through the normal wordline, so `!DCC0` reads `!Cout`. This
identity gives the sum: `A xor B xor Cin = MAJ(A, !Cout, MAJ(B, Cin, !Cout))`.
The per-bit mix of AAPs and APs (six and two) is this design's choice. The
8n+2 total is the same as SIMDRAM's adder.

Subtraction (`OP_SUB`) reuses the adder as A + !B + 1. The carry starts from
C1 instead of C0. Each bit adds two AAPs in front of the adder's steps:
`B[i] -> B4` puts B in DCC0, then `B5 -> B8` copies !B into T0..T2. The
remaining steps run unchanged from `A[i] -> B4` on. That makes 9n+2
operations. Row Y[n] ends up 1 when A >= B, meaning no borrow.

## Selecting mats: matlines, latches and the mat queue

Inside a chip (`mimdram_chip`, `mimdram_subarray`):

* `chip_select_mat_id` compares a logical range with the chip's 3-bit id
  register. It tells whether the chip holds any mat of the range, and turns
  the range into physical mat numbers. A range that spans chips is clipped to
  0 at the start and to 15 at the end.
* `mat_selector` raises one matline per mat inside the physical range.
* A raised matline lets that mat's `row_decoder_latch` capture the row
  address and the ACT/PRE strobe from the global wordline. Mats outside the
  range ignore it and keep whatever they have open. RD and WR are gated by the
  same matlines.

A DDR4 ACT has no spare pins for a 14-bit range, so the range travels
separately and waits in a per-chip **mat queue** (`mat_queue`, 8 entries).
The command set (`dram_op_e`) is:

| command | effect |
|---|---|
| `PRE` | precharge the mats of `range` |
| `PRE_ENQ` | precharge, and enqueue `range` for a later ACT |
| `ACT_DEQ` | activate `row` in the mats of the range at the queue head; dequeue it |
| `ACT_ENQ` | as `ACT_DEQ`, and enqueue `range` for the next ACT (on DDR4 pins the range would follow in a second cycle) |
| `RD`, `WR` | column access to column group `col` in the mats of `range`; `WR` with `gbmov` takes its data from the neighbouring mat; `RD` with `hff_hold` starts an intra-mat move |

Every chip enqueues an entry for every enqueue command, including chips that
hold none of the range (`sel = 0`). That keeps all queues in step, so every ACT
pops the same logical entry everywhere.

Timing inside the chip: a command reaches the mats one clock after it is on
the bus. RD data appear on the chip's data output two clocks after the RD.
Write data are sampled with the WR.

## Moving data between columns

**GB-MOV (inter-mat).** Each mat owns a 4-bit set of global sense
amplifiers. `global_row_buffer` adds a 2:1 multiplexer in front of each set,
so a WR with `gbmov` writes set *i* with the contents of set *i-1*. A GB-MOV
from mat *s* to mat *s+1* is one command sequence:

```
ACT_ENQ src row in [s,s], enqueue [d,d]   (2)
ACT_DEQ dst row in [d,d]                   (tRAS)
RD  col in [s,s]                           (tRELOC)
WR  col in [d,d], gbmov                    (tWR)
PRE [s,d]                                  (tRP)
```

The numbers in brackets are the gaps to the next command. One GB-MOV takes
tRAS + tRELOC + tWR + tRP, plus 2 clocks for the range transfer.

**LC-MOV (intra-mat).** An RD with `hff_hold` latches a column group in the
HFFs and leaves their enable high. The mat is then precharged and the
destination row opened, and the next WR writes the HFF data into the new row
and column. One LC-MOV takes 2(tRAS + tRP) + tRELOC + tWR, plus one clock for
the RD.

## The control unit

`mimdram_control_unit` sits in the memory controller:

* **bbop buffer** (`bbop_buffer`, 1024 entries). A circular buffer that can
  remove entries out of order. Removed entries leave holes, which the head
  pointer skips one per clock, so the oldest live entry is always at the head.
* **mat scoreboard** (`mat_scoreboard`). One busy bit per mat (128 bits),
  with a combinational "is this range free" test.
* **mat scheduler** (`mat_scheduler`). Online first fit. Each clock it looks
  at one buffer entry, from oldest to newest. If the entry's mats are free and
  an engine is idle, it dispatches the entry in that same clock, marks the
  mats busy and removes the entry. Otherwise it moves on, so a younger bbop can
  overtake a blocked older one. The scan restarts from the oldest entry at the
  end of the buffer and whenever an engine finishes.
* **micro-program engines** (`uprog_engine`, 8 of them). Each expands one
  bbop into DRAM commands (see the forms above) and keeps its own command
  gaps with a down-counter. The PRE that closes one operation is sent as
  `PRE_ENQ` when the next operation uses the same range, which overlaps the
  precharge with the range transfer. When its last tRP has passed, the engine
  pulses `done`, which frees its mats and reports the bbop's tag.
* **command arbiter** (`cmd_arbiter`). Sends one command per clock: the host
  port first, then the engines in round-robin order. The chips give each ACT
  the oldest queued range, so the ACTs must leave in the order their ranges
  were enqueued, even with eight engines interleaving. The arbiter keeps a
  FIFO of requester ids for this. Each `PRE_ENQ`/`ACT_ENQ` pushes an id and
  each ACT pops one. An ACT is granted only to the requester at the head of
  the FIFO, and an enqueue only while the FIFO has room. Each engine has at
  most one range outstanding, so this cannot deadlock. Nothing is granted in
  the clock after an `ACT_ENQ`, which stands for its second bus cycle.

## Mat labels and the translation table

Software does not know physical mats. Each bbop carries a mat label. The
operating system places the label's data in a contiguous mat range and writes
the mapping into `mat_translation_table`. The table is direct mapped, indexed
by the XOR-folded `{pid, label}`, and tagged with the full pair. The top looks
up every incoming bbop. A miss drops the bbop and pulses `bbop_miss`; a hit
replaces the label with its range.

## The system top

`mimdram_top` has four groups of ports:

* **bbop input.** `bbop_valid/bbop/bbop_label/bbop_pid/bbop_ready/bbop_miss`.
  The operation is an `OP_ADD`, `OP_SUB`, `OP_COPY` or `OP_MOV` with rows, bit count,
  tag and column fields; see `bbop_t` in `mimdram_pkg`.
* **Table fill.** `mtt_wr_*` writes the translation table.
* **Host port.** `host_req/host_cmd/host_gnt` is a raw command port for
  regular memory traffic (loading operands, reading results). It has priority
  on the bus and goes through the same ordering rules.
  `host_wdata/host_rdata` carry 4 bits per mat, with chip *c* on bits
  `[c*64 +: 64]`.
* **Outputs.** `done_valid/done_tag` report completions. `pe_busy`,
  `dram_cmd` and `mat_open` are for observation.

Typical use:

1. Fill the translation table.
2. Write operand rows through the host port: `PRE_ENQ`, `ACT_DEQ row`, one
   `WR` per column group, `PRE`.
3. Push bbops and wait for their tags.
4. Read the results back the same way.

The host is responsible for DRAM timing on its own commands.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl --top-module tb_mimdram_top \
    rtl/mimdram_pkg.sv tb/tb_mimdram_top.sv -y rtl -y tb
./obj_dir/Vtb_mimdram_top
```

The testbenches cover the following:

* `tb_uprog_engine` checks the cycle counts: 8n+2 operations for an n-bit
  ADD, 9n+2 for SUB, exact tRAS/tRP gaps, the GB-MOV and LC-MOV latencies above, and that
  stalled grants never shorten a gap.
* `tb_cmd_arbiter` checks, with a shadow mat queue, that every ACT gets its
  own range.
* `tb_mimdram_top` runs the whole system at 64 rows x 32 columns per mat:
  - two concurrent 4-bit ADDs, a 4-bit SUB, two COPYs, a GB-MOV, an
    LC-MOV, a translation miss and a scheduler overtake;
  - every lane is checked against a software model;
  - it counts each mechanism and fails if one never occurred.
* `tb_mimdram_top_full` runs the full default size, with no parameter
  overrides: two 4-bit ADDs on 4 mats each, with 512 lanes per mat. It runs
  in well under a minute.
* `tb_workload_mix` also runs at full size. It runs the addition part of one
  multi-programmed mix: eight 8-bit ADDs at once, one per engine. Each uses
  the vectorization factor of one application (320 lanes for x264 up to 4000
  for gemm), so 43 mats hold data. It checks every lane and 66 operations
  per ADD. The multiplications, divisions and reductions of those
  applications are not run, because their micro-programs are not built.

## Where this design departs from, or goes beyond, the description it follows

* **Built micro-programs.** Only ADD, SUB, COPY and the two moves have
  micro-programs. SUB is derived here from the adder. Multiplication, division, predication and a
  whole reduction operation are not built. A reduction can be composed from
  MOV and ADD bbops.
* **Row map and adder steps.** The B-address table and the adder's exact
  steps are this design's own.
* **GB-MOV and LC-MOV cost.** GB-MOV costs 2 clocks more than
  tRAS + tRELOC + tWR + tRP, for the range transfer of its `ACT_ENQ`. LC-MOV
  costs 1 clock more than 2(tRAS + tRP) + tRELOC + tWR.
* **Range-limited commands.** PRE closes only the mats of its range, and
  RD/WR carry a range. A plain DDR4 PRE has no field for that. Both are this
  design's choice.
* **Order FIFO and host priority.** The arbiter's order FIFO and host
  priority are this design's own. The mat queues still need a global order,
  and this is one way to provide it.
* **Chip id register.** It is loaded from a strap input during reset.
* **Circuit-level parts.** The mat isolation transistors are modelled as the
  load enable of the row-decoder latch. The array is behavioural: no analog
  effects, no refresh, and no timing checks inside the mat.
* **Not modelled.** The transposition unit, the host CPU, the compiler passes
  and the DDR4 pin-level interface are not modelled.
* **Command clock.** One clock per command slot at 1.2 GHz. `T_RELOC` = 4 is
  an assumed value.
* **Synthesis.** The full-size top is large: 128 mats of 1014 x 512 cells are
  kept as memory arrays. Synthesis tools take many minutes on it.
