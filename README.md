# ReCAM processing-in-storage for Smith-Waterman alignment

A resistive content-addressable memory (ReCAM) can be used as a massively
parallel SIMD machine. Every row of the memory is a tiny bit-serial
processor. A single controller broadcasts one command per clock to all rows
at once:

- a compare of selected bit columns against a key, which marks the matching rows;
- a write into the marked rows;
- a one-row shift of the marks.

Any function can then be evaluated in every row together by stepping through
its truth table, one table line and one bit position at a time. With a
quarter of a billion rows this is enough to score a whole chromosome-by-chromosome
Smith-Waterman matrix one antidiagonal per iteration: every cell of an
antidiagonal sits in its own row.

This repository holds synthesizable SystemVerilog for such a system:

- a microcontroller with its truth-table buffer;
- 32 daisy-chained ReCAM crossbar ICs of 8M rows × 256 bits each (8 GB in total);
- the OR reduction network that joins them;
- a Smith-Waterman program for the microcontroller, with a testbench that
  checks its scores against a software model.

## 1. The array and its commands

Each IC (`recam_crossbar`) stores `ROWS` rows of 256 bits and keeps one TAG
bit per row (`recam_tag_logic`). All ICs receive the same command, KEY and
MASK on a shared bus (`recam_cmd_t`), one command per clock:

| command | effect in every IC, all rows in parallel |
|---|---|
| `CMD_CMP` | TAG ← (row matches KEY on the MASK bits), only in rows inside the active range unless `cmp_all` |
| `CMD_CMP_TEST` | `any` ← some row has TAG and matches; TAG is kept |
| `CMD_CMP_CAND` | if some row *anywhere* matched in the last test: TAG ← TAG ∧ match |
| `CMD_WRITE` | tagged rows take KEY in their MASK bits |
| `CMD_WRITE_TAG` | rows in the active range take their own TAG bit in the MASK bits |
| `CMD_SHIFT` | TAG moves one row down; row 0 takes the TAG leaving the previous IC |
| `CMD_TAG_ROW` | TAG marks only the row whose global number is `lo` |
| `CMD_READ` | `rdata` ← OR over tagged rows of (row ∧ MASK) |
| `CMD_SET_RANGE` | active row range ← [`lo`, `hi`] (global row numbers) |

The response of an IC (`recam_rsp_t`) is an `any` flag and `rdata`. The
reduction network (`recam_reduction_net`) ORs the responses of all ICs. The
combined `any` goes back to the microcontroller and to every IC, where
`CMD_CMP_CAND` uses it. TAG, `any` and `rdata` are registered: they can be
seen one clock after the command.

Two choices here are this design's own:

- **The active range.** A program often works on a window of rows, for
  example the cells of the current antidiagonal. Each IC holds `lo`/`hi`
  range registers, and compares and TAG write-backs only affect rows inside
  the range. The range is loaded once with `CMD_SET_RANGE`.
- **The TAG write-back.** Shifting a field one row down takes three commands
  per bit:
  1. compare the bit to 1, which puts the bit column into TAG;
  2. shift TAG down one row;
  3. write TAG back into the same bit column.

  Step 3 writes each row's TAG value, 0 or 1. A plain "write 1 to the tagged
  rows" would leave stale ones behind in rows whose new TAG is 0.

Moving TAG across ICs: the bottom row of IC *k* feeds the top row of IC
*k*+1 (`chain_in`/`chain_out` of the top are the two ends). A shift across
the whole 268M-row array therefore takes one clock, the same as within one IC.

The resistive 2T2R bitcell, the match-line precharge and the sense
amplifiers are analog. Here, the match of a row is the digital function they
compute: `((row ^ KEY) & MASK) == 0`.

## 2. Bit-serial arithmetic from truth tables

This is the core of the machine and the least obvious part.

### Table entries

A truth-table entry (`tt_entry_t`) has two halves:

- **Compare half.** Values and care bits over four one-bit slots: bit *p*
  of operand A, bit *p* of operand B, and two flag bits FLAG0 and FLAG1.
  Each row keeps the flag bits at fixed positions.
- **Write half.** Values and enables over three slots: bit *p* of the
  destination D, FLAG0 and FLAG1.

### How an operation runs

For every bit position *p* (LSB first, or MSB first for comparisons), the
sequencer (`recam_assoc_seq`) steps through the entries of the table. Each
entry costs two commands:

1. A compare, whose KEY and MASK are built from the entry's compare half
   placed at the bit positions of A, B and the flags. Rows whose bits equal
   the entry are tagged.
2. A write into those rows of the entry's write half.

Take the add as an example. FLAG0 holds the carry, D ← A + B is done one
bit at a time, and the eight full-adder lines run at every bit. Two extra
cycles clear the carry flag first. That gives 2 + 32·8·2 = **514 cycles**
for a 32-bit add.

### Entry order

A write can change a bit that a later compare in the same bit position
looks at. The carry is one such bit, and so is B when D = B. A row could
then be "moved" onto an entry that is still to come and be processed twice.

The entries are ordered so that this cannot happen:

- Add runs 000, 010, 001, 011, 111, 101, 110, 100 (over A, B, carry).
  This order is safe for a separate destination and for the in-place form
  B ← A + B.
- Sub runs 000, 100, 101, 001, 011, 111, 010, 110 (over A, B, borrow).
  This order is safe for a separate destination and for the in-place form
  A ← A − B.

For each write that changes a compared bit, the entry the row moves to has
already been run.

No single order serves both in-place forms of an operation. The in-place
B ← A − B, for example, would have to swap rows between entries 001 and 011,
and one pass cannot do that. An in-place A ← A + B is issued as B-operand =
destination, since addition commutes.

The testbenches check out-of-place add and subtract, and both supported
in-place forms.

### Skipped entries

Entries that write nothing cost no cycles. If the B operand is a scalar from
a register, the entries whose B bit disagrees with the scalar's bit *p*
cannot match and are also skipped. So adding a constant costs about half
of a column add.

The skipping is done by a combinational search over the table's 16
entries, so it adds no cycles.

### Signed values

Scores are 32-bit two's complement. Operations that compare magnitudes
(row-wise max, max scalar) run MSB first and invert the sense of the sign
bit.

### The tables

The built-in tables, held in `recam_tt_buffer`, are those listed by size in
the microcontroller's table buffer: 8×2 Add, 8×2 Sub, 2×1 NOT, 4×1 XOR,
4×1 AND, 4×2 Max, 4×1 NAND and 4×1 NOR.

Row-wise max D ← max(A, B) takes two passes:

1. **MAXCMP** (the 4×2 Max table), MSB first. It sets FLAG0 (A > B) or
   FLAG1 (A < B) at the first bit where A and B differ.
2. **MAXSEL**, a table added in this design, copies B where FLAG1 is set
   and A elsewhere.

The upper part of the buffer (entries 48–63 and table ids 9–15) is
user-programmable. After reset it holds the DNA base-pair **match** table.
That table sets FLAG0 in rows whose two 2-bit bases differ; it takes 10
cycles.

### Max scalar

Max scalar finds the largest value of a field over the active rows and tags
the rows that hold it. It works MSB first with two commands per bit:

- a test compare: is there a tagged row with a 1 here (or a 0, for the sign
  bit)?
- a conditional AND, which drops the other rows only if the answer was yes,
  anywhere in the system.

The answers form the maximum, bit by bit. The result is the maximum value
itself, so the microcontroller does not need a read afterwards. Cost:
1 + 2·32 = 65 cycles.

## 3. Microcontroller

`recam_mcu` holds the instruction memory (`recam_imem`, 256 × 64-bit
words), a 32 × 32-bit register file (`recam_regfile`, r0 = 0), a small ALU
(`recam_alu`: add, sub, signed max and min, signed less-than), the
truth-table buffer and the sequencer.

It runs a simple fetch / decode / execute loop:

- A scalar instruction takes 2 clocks.
- A vector instruction is handed to the sequencer, and the controller waits
  until the sequencer finishes.

| instruction | meaning |
|---|---|
| `LI rd, imm` / `ADDI rd, ra, imm` | load immediate, add immediate |
| `ADD`, `SUB`, `MAX`, `MIN rd, ra, rb` | scalar ALU |
| `BLT ra, rb, target` / `JMP target` / `HALT` | control |
| `RANGE ra, rb` | active rows ← [ra, rb] |
| `VTT rd, ra, rb, w, table` | field rd ← table(field ra, field rb), w bits |
| `VTTI rd, ra, rb, w, table` | same with register rb as a scalar B operand |
| `VSHIFT ra, w` | field ra one row down |
| `VSETF rd, f, w, imm` | rows with FLAG0 = f get imm in field rd |
| `VFILL rd, w, imm` | all active rows get imm in field rd |
| `VMAXS rd, ra, w` | rd ← max scalar of field ra |
| `VREAD rd, ra, rb, w` / `VWRITE rd, ra, rb, w` | one field of row rb to/from register rd |

The encoding is `instr_t` in `recam_pkg`, built with `mk_instr()`. In vector
instructions the field operands are *registers holding a bit position*, not
fixed fields. Because of this, a program can rotate its three H antidiagonal
buffers by swapping three register values, and no data moves.

While the controller is halted, a host can:

- load the program;
- write user truth tables;
- put its own commands on the array bus to load and read rows;
- read registers.

`start` runs the program from address 0.

## 4. Smith-Waterman on the array

### Row layout

Row *r* holds base A[r] of the first sequence. Each row is laid out as
follows (positions in `recam_pkg`):

| bits | field |
|---|---|
| 1:0 | seqA: base of sequence A |
| 3:2 | seqB: window of sequence B, moves down one row per iteration |
| 5:4 | BSTO: stored copy of sequence B, B[r] in row r |
| 63:32 | E: vertical-gap score (moves down with the antidiagonal) |
| 95:64 | F: horizontal-gap score |
| 191:96 | AD0, AD1, AD2: three H antidiagonals, cyclically reused |
| 223:192 | tmp |
| 225:224 | FLAG0, FLAG1 |

### Cells and sections

At antidiagonal *d* (from 2 to n+m), row *r* scores cell
(i = r+1, j = d−i). The active rows are

    lo = max(0, d−1−m)        hi = min(n−1, d−2)

This covers the three sections of the matrix:

- a growing triangle, where hi increases;
- a band of constant length;
- a shrinking triangle, where lo increases.

### One iteration

The program (`tb/sw_prog_pkg.sv`, `build_program`) runs the classic
antidiagonal loop with affine gaps (first gap G_first, extension G_ext).

Each iteration does the following:

1. Shift seqB one row down. While d < m+2, the next base of B is read from
   the BSTO field of row d−2 and written into row 0. Rows shifted in from
   above the first IC are zero, which is the matrix border.
2. Shift the older H antidiagonal one row down, so each row sees its
   diagonal predecessor.
3. Run match, then set the match or mismatch score into tmp, then add.
4. Take the max with 0.
5. Compute the gap candidates H − G_first and E/F − G_ext, then F, then E.
   Shift E one row down.
6. Fold F and E into the new H with row-wise max.
7. Run max scalar of the new antidiagonal into the running best score.
8. Rotate the buffer registers.

The arithmetic steps run on rows lo−1 … hi, one row more than the active
cells. In the shrinking section, row lo's vertical gap needs the value that
row lo−1 computes.

The result is the best local alignment score, held in register 1.

The end-to-end testbench checks the score against a plain software
implementation of the same recurrence. It does so for n > m, n < m and
n = m.

## 5. Cycle counts

| operation | this design | table of the paper |
|---|---|---|
| shift a 32-bit field one row down | 96 | 96 |
| C ← A + B, 32 bits | 514 | 512 |
| B ← A + B, 32 bits (in place) | 514 | 256 |
| row-wise max, 32 bits, column operand | 386 (130 + 256) | 64 |
| max scalar, 32 bits | 65 | 64 |
| DNA base-pair match | 10 | 10 |

The two-cycle extras come from explicit setup cycles: clearing the carry
flag, or tagging the active rows before max scalar.

Two counts are well above the paper's:

- **In-place add.** This design runs the same table for in-place and
  out-of-place adds, so both take 514 cycles.
- **Row-wise max.** It is built here from the 4×2 comparison table plus a
  select pass. No table of that size reaches 64 cycles for 32-bit operands.

One antidiagonal iteration of the Smith-Waterman program takes about 3,500
cycles here. The paper's reported throughput for chromosome 1 corresponds to
about 2,250 cycles at 1 GHz. At the paper's clock this design would
therefore reach roughly two thirds of the reported cell-update rate.

## 6. Capacity

The default system has 32 × 8,388,608 = 268,435,456 rows. The program needs
one row per base of the longer sequence, with 200 of the 256 bits per row in
use.

The human-versus-chimpanzee chromosome pairs the paper evaluates are
chromosomes 1, 5, 8 and 16. Their lengths are known outside the paper: the
longest, human chromosome 1, has 249 million bases. So each pair fits in one
pass. The largest best score possible for these lengths is 2·2.5×10⁸, which
fits the 32-bit score fields.

## 7. Where this departs from the paper, and what is not modelled

These parts are this design's own:

- the command set, the range registers, the instruction set and the table
  encoding;
- the BSTO field, used to stream sequence B into the array;
- the MAXSEL table.

The paper does not give these.

- **Chip crossings.** The paper notes that crossing chip boundaries costs a
  few more cycles in real hardware. Here the TAG chain is modelled as a
  same-cycle connection.
- **Analog behaviour.** There is no power, energy or analog timing model.
  The 2T2R cell and the sense circuitry are reduced to their logic function.
- **Programs.** Only the Smith-Waterman score is computed. There is no
  traceback.

## 8. Source map and simulation

```
rtl/recam_pkg.sv            sizes, row layout, command, table and instruction types
rtl/recam_tag_logic.sv      TAG column of one IC
rtl/recam_crossbar.sv       one ReCAM IC: rows, compare/write, range, read
rtl/recam_reduction_net.sv  OR tree over the ICs' responses
rtl/recam_tt_buffer.sv      truth-table buffer (built-in + user region)
rtl/recam_assoc_seq.sv      associative sequencer
rtl/recam_imem.sv           instruction memory
rtl/recam_regfile.sv        register file
rtl/recam_alu.sv            scalar ALU
rtl/recam_mcu.sv            microcontroller
rtl/recam_prins_top.sv      system: controller + chained ICs + reduction network
tb/sw_prog_pkg.sv           Smith-Waterman program builder and software reference
tb/tb_*.sv                  one self-checking testbench per module
```

Each testbench prints `TB_RESULT checks=N failures=M`. For example, to run
the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb rtl/recam_pkg.sv tb/sw_prog_pkg.sv \
    $(ls rtl/*.sv | grep -v recam_pkg) tb/tb_recam_prins_top.sv \
    --top-module tb_recam_prins_top -o sim
./obj_dir/sim
```

The unit testbenches compare each block with an independent model and
check the cycle counts above. `tb_recam_assoc_seq` covers every operation
on random data.

The full default size has 8 GiB of array state. That is too large to
simulate with a two-state simulator on an ordinary workstation, so it has
not been simulated. The largest system simulated end to end has 4 ICs of
4 rows, running sequences up to 12 × 8 bases. The default parameters
compile and elaborate.
