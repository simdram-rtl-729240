# SIMDRAM memory-controller logic: bit-serial SIMD computation inside DRAM

A DRAM row holds tens of thousands of bits, and the analog behaviour of the
array can combine whole rows at once. SIMDRAM exploits this: it stores the
operands of a vector operation *vertically*, so that every bitline (DRAM
column) is one SIMD lane holding one element, bit 0 in row `base`, bit 1 in
row `base+1`, and so on. An operation such as an n-bit addition then becomes a
short program of row activations repeated once per bit. Each step processes
one bit of every element of the row at the same time, e.g. 65,536 lanes for an
8 KB row.

This repository holds the digital side of that system, the logic that sits in
the memory controller:

* a **control unit** that replays the row-activation program ("uProgram") of
  a requested operation;
* a **transposition unit** that converts between the ordinary horizontal
  layout (one element per word) and the vertical layout;
* an **instruction front end** (ISA extensions) through which the host installs
  uPrograms, moves data in and out of the vertical layout and launches
  operations;
* a **DRAM command generator** that turns row-level requests into timed
  ACTIVATE / PRECHARGE / READ / WRITE commands.

The DRAM array, which does the actual computing, is analog and is not RTL. A
behavioural model of it (`tb/dram_model.sv`) lets the whole design be simulated
end to end.

## 1. What the DRAM array can do

Three analog effects are the only compute primitives. They come from earlier
processing-using-DRAM work (row copy and triple-row activation), which SIMDRAM
builds on:

| Primitive | Commands | Effect |
|---|---|---|
| Row copy | `ACT src; ACT dst; PRE` | The sense amplifiers still hold `src` when `dst` opens, so `dst := src`. |
| Majority (MAJ) | `ACT` on an address that opens three rows | Charge sharing leaves `MAJ(a,b,c)` in all three rows, bit by bit. |
| NOT | copy into a dual-contact cell row through its negated wordline | The cell stores the complement; reading it through the true wordline gives `!x`. |

MAJ and NOT are logically complete:
`AND(a,b) = MAJ(a,b,0)`, `OR(a,b) = MAJ(a,b,1)`.
So any operation can be written as a sequence of row copies and majority
activations. A small reserved region of each subarray makes this possible.
This design uses the following row addresses:

| Row address | Opens | Purpose |
|---|---|---|
| 0–3 | T0, T1, T2, T3 | compute (scratch) rows |
| 4 / 5 | DCC0 / !DCC0 | dual-contact row 0, true / negated wordline |
| 6 / 7 | DCC1 / !DCC1 | dual-contact row 1 |
| 8 | !DCC0, T0 | copy a value and its complement in one step |
| 9 | !DCC1, T1 | idem |
| 10 | T2, T3 | |
| 11 | T0, T3 | |
| 12 | T0, T1, T2 | MAJ |
| 13 | T1, T2, T3 | MAJ |
| 14 | DCC0, T1, T2 | MAJ with one operand negated |
| 15 | DCC1, T0, T3 | MAJ with one operand negated |
| 16 | C0 | all zeros |
| 17 | C1 | all ones |
| 32 and up | data | operands in vertical layout |

Two command sequences cover everything:

* **AAP(src, dst)**: `ACT src, ACT dst, PRE`. This is a copy. If `src` is a
  triple, the MAJ result is also copied to `dst`.
* **AP(src)**: `ACT src, PRE`. This is an in-place MAJ of a triple.

Because of the vertical layout, a shift is free: "bit i+1 of the result" is
simply a different row index. No data has to move. An explicit shift, when
one is wanted, is one row copy per bit (`SHL` below).

## 2. uPrograms

A uProgram is the list of AAP/AP steps for one operation. It is written once
for a generic operand placement and element width. At run time the control
unit fills in the operand rows and `n`. Each uOp (45 bits, `simdram_pkg::uop_t`)
is one of the following:

| uOp | Meaning |
|---|---|
| `AAP src, dst` | issue an AAP request |
| `AP src` | issue an AP request |
| `LOOP t` | `i := i+1`; jump to `t` while `i < n`, otherwise `i := 0` and fall through |
| `LOOPJ t` | the same with the outer counter `j` (nested loops, used by multiplication, division and bitcount) |
| `DONE` | the operation is finished |

A row operand has a mode, an operand slot `k` (0–3) and an immediate `imm`.
Slot 0 is by convention the destination, slots 1 and 2 are the sources, and
slot 3 is scratch space or a third source.

| Mode | Row |
|---|---|
| `ABS` | `imm` (reserved rows, constants) |
| `BASE` | `base[k] + imm` |
| `BIT` | `base[k] + i + imm` (bit i of an operand) |
| `MSB` | `base[k] + (n-1) - imm` (e.g. the sign bit) |
| `J` | `base[k] + j + imm` |
| `IJ` | `base[k] + i + j + imm` |
| `NJ` | `base[k] + n + j + imm` |
| `RJ` | `base[k] + (n-1) - j + imm` (outer loop from the top bit down) |

For example, this is the body of the n-bit addition `D = A + B`. The carry is
kept in scratch row S, which was cleared first by `AAP C0, S`. The full adder
is `Cout = MAJ(A,B,C)` and `Sum = MAJ(!Cout, C, MAJ(A,B,!C))`.

```
body: AAP S,      B9     ; DCC1 = !C, T1 = C
      AAP A[i],   T0
      AAP B[i],   T3
      AP  B15            ; T0 = MAJ(A, B, !C)
      AAP A[i],   T2
      AAP B[i],   T3
      AP  B13            ; T1 = T2 = T3 = Cout = MAJ(A, B, C)
      AAP T1,     !DCC0  ; DCC0 = !Cout
      AAP S,      T1     ; T1 = C
      AAP T0,     T2
      AP  B14            ; T1 = MAJ(!Cout, C, MAJ(A,B,!C)) = Sum
      AAP T1,     D[i]
      AAP T3,     S      ; carry for the next bit
      LOOP body
      DONE
```

The test library (`tb/simdram_uprog_pkg.sv`) contains fifteen such programs, 223
uOps in all:

| Operation | How it is built from MAJ |
|---|---|
| AND, OR | `MAJ(A, B, 0)` and `MAJ(A, B, 1)` |
| XOR | `MAJ(OR, !AND, 0)` |
| ADD | the full adder above |
| SUB | `A + !B` with carry-in 1 |
| GT (A > B, unsigned) | borrow chain `C = MAJ(A, !B, C)` from the LSB up; 1-bit result |
| EQ | `E = MAJ(E, !XOR(A, B), 0)` over all bits, starting from `E = 1`; 1-bit result |
| RELU | `A & !sign` for every bit |
| ITE (`P ? A : B`) | `MAJ(MAJ(P,A,0), MAJ(!P,B,0), 1)` with a 1-bit predicate row P |
| AND3, OR3 | `MAJ(MAJ(A,B,k), C, k)` with k = 0 or 1; a 3-input example of N-input logic, the third source in slot 3 |
| BITCOUNT | nested loop; for each bit j of A, the n-bit counter D is incremented by `A[j]` through a half-adder chain: `sum = XOR(D[i], c)`, `c = D[i] AND c` |
| SHL | left shift by one as plain row copies, `D[i+1] = A[i]`, `D[0] = 0`; (n+1)-bit result |
| DIV | restoring division, unsigned (a zero divisor gives all ones). For k = n−1 down to 0 (outer loop, `RJ` rows): `T = (R << 1) | A[k]` by row copies, `D = T − B`, `q = T[n] OR carry-out`, `Q[k] = q`, `R = q ? D : T` through the ITE formula |
| MUL | nested loop; for each bit j of B and each bit i of A, `P[i+j] += A[i] & B[j]` with a ripple carry, then `P[n+j] = carry`; 2n-bit product |

Maximum and minimum are ITE on a GT result, as in the end-to-end test.

The request counts and DRAM cycles for n-bit elements follow directly. At
DDR4-2400 timing an AAP costs `2·tRAS + tRP` = 95 cycles and an AP costs
`tRAS + tRP` = 56 cycles. Some examples:

| Operation | n | Requests | Cycles |
|---|---|---|---|
| ADD | 16 | 161 AAP + 48 AP | 17,983 |
| MUL | 16 | 3632 AAP + 1024 AP | 402,384 |
| DIV | 16 | 5504 AAP + 1552 AP | 609,792 |

The control-unit test checks these counts, and the exact first-ACT-to-last-PRE
time, for every operation.

## 3. Control unit (`rtl/control_unit.sv`)

The control unit has two writable memories:

* the uProgram memory, 1024 × 45 bits;
* the operation table, 32 entries, which maps an operation number to the
  address of its first uOp.

Installing a new operation means writing both memories. No hardware change is
needed.

`start` latches:

* the operation number;
* `n` (1–64);
* the four operand base rows.

The unit then runs a three-state machine (idle, fetch, execute):

* Each uOp is read in one cycle from the synchronous memory.
* An AAP or AP waits in the execute state until the command generator accepts
  the request.
* LOOP and LOOPJ take one cycle each.
* `done_o` pulses when the unit reaches DONE. The last request has been
  accepted by then, but may still be executing in DRAM.

Requests carry only row addresses, so the column and write-data fields of the
request stay zero.

## 4. Transposition unit (`rtl/transposition_unit.sv`)

The CPU keeps its ordinary data horizontal. Only data meant for in-DRAM
computation is converted. The unit works on a granule of 64 elements, the
width of one DRAM data word, using a 64×64-bit buffer
(`rtl/transpose_buffer.sv`). The buffer can be written and read both by rows
and by columns.

* **To vertical** (`start_wr`): it accepts 64 elements on `hin_*`, one per
  beat, into buffer rows. It then issues n `WR` requests. Request b writes
  buffer column b (bit b of all 64 elements) into row `base+b`, word `col`.
* **To horizontal** (`start_rd`): it issues n `RD` requests. Each returned
  word is one bit-plane and goes into a buffer column. It then drains 64
  elements on `hout_*`, zero-extended above bit n−1.

So 64 lanes cost n DRAM write or read requests in either direction. Wider
vectors use several `col` values, one instruction per 64 lanes.

## 5. Instruction front end (`rtl/bbop_decoder.sv`)

The host sends 134-bit instructions (`bbop_inst_t`) on a valid/ready port. An
8-entry queue (`rtl/sync_fifo.sv`) holds them. Instructions execute in order,
one at a time.

| Instruction | Fields used | Action | Completes |
|---|---|---|---|
| `UPROG_WR` | `col` = address, `data` = uOp | write one uOp | next cycle |
| `OPTAB_WR` | `op_id`, `col` = start address | map an operation to its uProgram | next cycle |
| `TRSP_WR` | `row[0]`, `col`, `nbits` | 64 host elements → vertical rows | after the unit's done and the generator idle |
| `TRSP_RD` | `row[0]`, `col`, `nbits` | vertical rows → 64 host elements | idem |
| `EXEC` | `op_id`, `nbits`, `row[0..3]` | run an operation | idem |

Waiting for the command generator to drain is what makes a read that follows
an operation see that operation's result. `retired` counts completed
instructions.

## 6. DRAM command generator (`rtl/dram_cmd_gen.sv`)

It accepts one request at a time and emits one command per cycle on
`dram_cmd`. An internal down-counter enforces the timing:

| Request | Command sequence |
|---|---|
| AAP | `ACT a` → tRAS → `ACT b` → tRAS → `PRE` → tRP → ready |
| AP | `ACT a` → tRAS → `PRE` → tRP → ready |
| WR / RD | `ACT a` → tRCD → `WR`/`RD` → max(tWR or tRTP, tRAS−tRCD) → `PRE` → tRP → ready |

The defaults are DDR4-2400 values in controller clocks: tRCD = 17, tRAS = 39,
tRP = 17, tWR = 18, tRTP = 9. Read data returns on `dram_rd_valid`/`dram_rd_data`
after the device's read latency. The transposition unit collects it in order.

## 7. Top level (`rtl/simdram_top.sv`)

The top module connects the decoder, the control unit, the transposition unit
and the command generator. Only one instruction runs at a time, so the two
units share the generator through a multiplexer; an assertion checks that they
are never active together.

Ports:

| Port | Direction | Meaning |
|---|---|---|
| `inst_valid/inst_ready/inst` | in/out/in | instructions |
| `hin_valid/hin_ready/hin_data` | in/out/in | 64-bit elements to transpose into DRAM |
| `hout_valid/hout_ready/hout_data` | out/in/out | 64-bit elements transposed out of DRAM |
| `dram_cmd` | out | command bus: cmd, row, col, write data |
| `dram_rd_valid/dram_rd_data` | in | read data from the device |
| `busy`, `retired` | out | status |

Parameters: `QDEPTH` (8), `T_RCD`, `T_RAS`, `T_RP`, `T_WR`, `T_RTP`.

Shared types and the reserved-row map are in `rtl/simdram_pkg.sv`.

## 8. Simulating

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_simdram_top \
    rtl/simdram_pkg.sv tb/simdram_uprog_pkg.sv rtl/*.sv tb/dram_model.sv \
    tb/tb_simdram_top.sv
./obj_dir/Vtb_simdram_top
```

| Testbench | What it checks |
|---|---|
| `tb_simdram_top` | Runs the top at its default parameters. It installs the library, transposes two vectors of 128 16-bit elements in, and runs AND, OR, XOR, ADD, SUB, GT, RELU, max via ITE, EQ, a 32-bit MUL, a 3-input AND, BITCOUNT, a left shift and DIV. It transposes every result back and compares each against a reference. It also checks the ADD cycle count and that each mechanism occurred: MAJ, row copy, NOT, both transposition directions, loop iterations, a full instruction queue stalling the host, and host back-pressure on the result stream. About 1.5 M cycles. |
| `tb_control_unit` | Runs all fifteen operations at several widths (including MUL and DIV at 16 bits), with exact request counts and timing. |
| `tb_transposition_unit` | Widths 1, 8, 33 and 64 in both directions; rows beyond the operand must stay untouched. |
| `tb_bbop_decoder` | Random instruction streams with fake units; checks field routing, ordering, retirement and queue depth. |
| `tb_dram_cmd_gen` | Random requests; the command bus is compared cycle by cycle against an independent timing model. |

`tb/dram_model.sv` implements the primitives of section 1 on a small array
(`N_ROWS` rows of `N_WORDS`×64 bits). It also flags any timing violation
against its own copy of the timing parameters.

## 9. What is this design's own, and what is left out

The following follow the system this design is based on:

* computing with MAJ and NOT from triple-row activation and dual-contact
  cells;
* the vertical layout, with one lane per bitline;
* programs of row activations replayed by a control unit in the memory
  controller;
* a transposition unit that lets horizontal and vertical data coexist;
* ISA instructions for transposing and for launching operations;
* the operation families listed in section 2.

These are choices made here:

* the uOp encoding, the addressing modes and the two loop counters;
* the operation table and the memory sizes;
* the instruction encoding and the in-order, one-at-a-time execution;
* the 64-element transposition granule and its buffer;
* the reserved-row addresses, which follow the Ambit layout;
* the DDR4-2400 timing values;
* the MAJ formulations of each operation. They are hand-written and
  correct, but not optimised for the fewest activations.

Not provided:

* an automatic flow that derives optimised MAJ/NOT programs from an AND/OR/NOT
  description. Here uPrograms are written by hand (in the test package) and
  installed through the ISA;
* uPrograms for inequality and less-than as separate programs (they are EQ
  and GT with the result inverted or the operands swapped), signed
  division, and logic with more than three inputs. The operand slots allow
  at most three sources;
* multiple banks or subarrays working in parallel, refresh, and interleaving
  with normal memory traffic. The generator handles one request at a time on
  one bank;
* any RowHammer protection;
* the DRAM array itself, apart from the behavioural model.

How far it can be trusted:

* All blocks pass their own tests and the end-to-end test.
* Each block's test was also run against a deliberately broken copy of the
  block and caught it.
* Timing correctness is checked only against the model's timing rules, not
  against a real device.
* Analog effects (reliability of triple-row activation under process
  variation) are outside the scope of this RTL.
