# Ambit: bulk bitwise operations inside a DRAM chip

The data sits in DRAM. A CPU that computes `A AND B` over two long
bitvectors spends almost all of its time moving rows across the memory
channel. Ambit does the operation inside the DRAM array. It relies on two
small changes to an ordinary DRAM subarray:

* **Triple-row activation (TRA).** Three wordlines of one subarray are raised
  together. Each bitline is precharged to VDD/2. It then shares charge with
  three cells, so it moves up when at least two of them are charged and
  down otherwise. The sense amplifier amplifies that deviation and writes
  the result back into all three cells. So TRA computes the bitwise
  **majority** `MAJ(A,B,C) = AB + BC + CA` over a whole row.
  * With `C = 0` this is `A AND B`.
  * With `C = 1` it is `A OR B`.
* **Dual-contact cell (DCC).** A DCC has two access transistors. One, on the
  *d-wordline*, connects the cell to the bitline. The other, on the
  *n-wordline*, connects it to the inverted bitline.
  * Activating a source row puts its value on the bitline and its complement
    on the inverted bitline.
  * Raising the n-wordline then stores the complement in the DCC.
  * Reading the DCC back through its d-wordline gives `NOT A`.

Everything else is ordinary DRAM commands that the memory controller
issues:

* `ACTIVATE` (ACT) opens a row.
* `PRECHARGE` (PRE) closes it.
* Two ACTs back to back without a PRE copy the first row into the second.
  This is the RowClone fast-parallel-mode copy.

The RTL here models such a chip at the logic level, together with a memory
controller that turns `bbop dst, src1, src2, nrows` requests into ACT/PRE
command sequences with DDR3-1600 timing.

## Row address grouping

The controller must never destroy an operand, and TRA overwrites all three
cells. So every subarray reserves some rows and splits its row addresses
into three groups. For a 1024-row subarray:

| group | addresses here | rows | purpose |
|---|---|---|---|
| D | 0 .. 1005 | 1006 data rows | ordinary data, one wordline each |
| C | 1006 = C0, 1007 = C1 | 2 control rows | all zeros / all ones, preset at reset |
| B | 1008 .. 1023 = B0 .. B15 | 16 addresses for 8 wordlines | scratch rows T0–T3 and the two DCC rows |

The eight B-group wordlines are:

* T0, T1, T2, T3;
* DCC0 and nDCC0 (the d- and n-wordline of the first DCC row);
* DCC1 and nDCC1.

Each B address raises one, two or three of these wordlines (`bgroup_decoder`):

| address | wordlines | address | wordlines |
|---|---|---|---|
| B0 | T0 | B8 | nDCC0, T0 |
| B1 | T1 | B9 | nDCC1, T1 |
| B2 | T2 | B10 | T2, T3 |
| B3 | T3 | B11 | T0, T3 |
| B4 | DCC0 | B12 | T0, T1, T2 |
| B5 | nDCC0 | B13 | T1, T2, T3 |
| B6 | DCC1 | B14 | DCC0, T1, T2 |
| B7 | nDCC1 | B15 | DCC1, T0, T3 |

* B12–B15 are the triple-row activations.
* B8–B11 let one copy land in two scratch rows at once.

The order of the groups in the address space (D first, then C, then B) is
this design's choice. The group sizes follow from 16 B addresses and 2
control rows.

## The AAP primitive and the command sequences

Every operation is a list of two primitives:

* `AAP(x, y)` = ACT x; ACT y; PRE. It copies row x into row y. When x is a
  TRA address, it copies the result of the TRA into y.
* `AP(x)` = ACT x; PRE. It runs a TRA in place.

`bbop_sequencer` holds the sequences. In them, Di and Dj are the sources
and Dk is the destination.

| op | sequence |
|---|---|
| and | AAP(Di,B0) AAP(Dj,B1) AAP(C0,B2) AAP(B12,Dk) |
| or | the same with C1 |
| nand | and-sequence with Dk replaced by: AAP(B12,B5) AAP(B4,Dk) |
| nor | nand with C1 |
| xor | AAP(Di,B8) AAP(Dj,B9) AAP(C0,B10) AP(B14) AP(B15) AAP(C1,B2) AAP(B12,Dk) |
| xnor | xor with C0 and C1 swapped |
| not | AAP(Di,B5) AAP(B4,Dk) |
| copy / zero / one | AAP(Di / C0 / C1, Dk) |

How xor works:

* The first three steps place Di in T0 and in the DCC0 cell, which holds
  `NOT Di`. They also place Dj in T1 and in DCC1 (`NOT Dj`), and 0 in T2 and
  T3.
* AP(B14) leaves `NOT Di AND Dj` in T1.
* AP(B15) leaves `Di AND NOT Dj` in T0.
* The last two AAPs OR T0 and T1 into Dk.

The or/nor/xnor variants come from swapping the control rows. copy, zero
and one are plain RowClone copies from a data row or a control row.

A request covers `nrows` consecutive data rows. The sequencer repeats the
sequence row by row, stepping dst, src1 and src2 together.

## The split row decoder and the overlapped AAP

The B-group decoder is small and separate from the regular decoder
(`split_row_decoder`). So the second ACT of an AAP can start while the first
row is still being sensed, but only when exactly one of the two addresses
is in the B group. The sense amplifiers then overwrite the second row with
the first row's value.

| AAP | issue times | duration |
|---|---|---|
| serial (neither or both addresses in the B group) | ACT, tRAS, ACT, tRAS, PRE, tRP | 28 + 28 + 8 = 64 cycles = 80 ns |
| overlapped | ACT, `T_ACT_ACT` = 8, ACT, PRE once the first ACT is `T_RAS + T_AAP_OVL` = 32 cycles old, then tRP | 32 + 8 = 40 cycles = 50 ns |

* The serial case is 2·tRAS + tRP.
* The overlapped AAP is 50 ns where the target is 49 ns: 4 ns above tRAS,
  rounded up to whole cycles.
* The second ACT does not need its own tRAS: the sense amplifiers already
  drive the bitlines, and only the extra 4 ns of the first activation is
  waited for.
* With `SPLIT_DECODER = 0` every AAP is serial.
* `aap_fast` and `aap_slow` pulse, per bank, each time an AAP of either kind
  is issued.
* Single-row op latency (including the last tRP):

  | op | cycles |
  |---|---|
  | and / or | 4 × 40 = 160 |
  | nand / nor | 4 × 40 + 64 = 224 (the AAP(B12,B5) is B-to-B and runs serially) |
  | xor / xnor | 5 × 40 + 2 × 36 = 272 |
  | not | 2 × 40 = 80 |

  The testbenches check these counts.

### Clock and timing values

Everything runs on one 1.25 ns clock, the DDR3-1600 command clock.

| parameter | cycles | ns |
|---|---|---|
| T_RAS | 28 | 35 |
| T_RP | 8 | 10 |
| T_RCD | 8 | 10 |
| T_WR | 12 | 15 |
| T_ACT_ACT (assumed) | 8 | 10 |
| T_AAP_OVL | 4 | 4 ns rounded up to 5 |

The DDR3-1600 timing table usually quoted lists tRP and tRCD as 15 ns. The
80 ns naive AAP only works out with the 8-8-8 speed bin (10 ns), so this
design uses 10 ns. Changing the `T_RP`/`T_RCD` parameters of `ambit_controller` is all it takes to
use 12 cycles instead.

## Block structure

```
ambit_system (top)
├── ambit_controller          memory controller: bbop engines + ordinary-access engine + command arbiter
│   └── bbop_sequencer ×NBANK  microcode and AAP/AP timing for one bank
└── ambit_chip                 one DRAM chip (stands for a rank), TRANSFER between banks
    └── ambit_bank ×NBANK      global row decoder: subarray select, one open subarray at a time
        └── ambit_subarray ×NSUB   cells, sense amplifiers, TRA and DCC behaviour
            └── split_row_decoder  D/C/B split
                └── bgroup_decoder the table above
ambit_pkg                      shared widths, command/op enums, command struct
```

Default parameters are those of a 2 Gb DDR3 chip:

* 8 banks;
* 2^15 rows per bank, in 32 subarrays of 1024 rows;
* 8192-bit rows;
* 64-bit bank and column I/O.

### ambit_subarray

The cells are modelled as follows:

* The 1006 data rows are a memory array with one read and one write port.
* C0/C1, T0–T3 and the two DCC rows are registers.
* One row of sense amplifiers holds the activated value.

Activation from the precharged state:

* A C/D address senses that row.
* A B address senses the majority of its raised cells. A cell raised
  through an n-wordline contributes its complement.
* Two raised cells of opposite value sense as 0. No sequence does this, and
  an assertion flags it.

Other commands:

* An ACT while a row is already open does not sense. It writes the sense
  amplifier value into the newly raised cells. This is what makes an AAP a
  copy. Cells on an n-wordline receive the complement.
* RD/WR access one 64-bit column of the sense amplifiers. A WR also updates
  the raised cells.
* PRE lowers all wordlines.

Charge sharing is ideal, and the model settles within one clock. The
analog timing exists only in the controller. The real chip places the two
DCC rows on opposite sides of the sense amplifiers. The model puts every
cell on one logical bitline, which gives the same logic.

### ambit_bank and ambit_chip

The bank decodes `row = subarray * ROWS + local row` and forwards commands
to one subarray. Only one subarray may be open. An ACT to a second one is
refused and raises `err`.

The chip has three jobs:

* It routes the command struct to a bank.
* It returns READ data one cycle later (`rvalid`).
* It implements `TRANSFER`: one 64-bit column of an open row in one bank is
  copied into an open row of another bank. This is the pipelined inter-bank
  RowClone mode.

The 8-bit DDR pins of a real chip are not modelled. The data port carries a
whole column per command.

### ambit_controller

The controller has one `bbop_sequencer` per bank, so operations on
different banks run in parallel. There are two host ports.

* **bbop port:** `bb_valid/bb_ready`, then op, bank, dst, src1, src2 and
  nrows. The request is accepted when that bank's sequencer is idle. Per
  bank, `bb_busy` is high while the op runs, `bb_done` pulses when it ends,
  and `bb_err` pulses when the op was refused.
* **ordinary port:** `mem_valid/mem_ready` for one 64-bit read or write,
  then `mem_done` with `mem_rdata`. Accesses are closed-page (ACT, tRCD,
  column command, PRE, tRP) and run one at a time.

`dst/src/mem_row` are *data-row numbers* of the bank. Row g lives in
subarray `g / 1006`, local row `g % 1006`. So the data rows of all
subarrays form one contiguous range, and the reserved rows are invisible
to the host.

A bbop stops with an error in two cases:

* one of its row steps would touch two subarrays;
* it runs past the last data row.

Operands must be placed in the same subarray. The host or driver does that
placement. No copy across subarrays is attempted.

Arbitration: the ordinary-access engine has priority on the command bus,
then the bank sequencers take turns. A sequencer only waits, so its
timing constraints are minimums and are never violated. This lets regular
reads and writes run in the middle of a long bulk operation.

Not modelled:

* tRRD, tFAW and refresh;
* FR-FCFS reordering;
* cache flushing before an operation, which is the host's job.

## Where this departs from the Ambit proposal

| Point | Ambit proposal | Here |
|---|---|---|
| tRP, tRCD | 15 ns (DDR3 table) but 80 ns naive AAP (8-8-8) | 10 ns, 8-8-8 followed |
| overlapped AAP | 49 ns | 50 ns (4 ns rounded up to a cycle) |
| second ACT of an overlapped AAP | "after the first activation has sufficiently progressed" | fixed 8 cycles |
| DCC rows | one on each side of the sense amplifiers | one logical bitline |
| rank | 8 chips, 8 KB rows | one chip stands for the rank, 1 KB rows |
| operands in different subarrays | left to the driver | request refused with `bb_err` |
| ECC, data scrambling | incompatible, left open | not present |
| chip I/O serialisation, PHY | standard DRAM | not modelled |
| bbop ISA, driver, cache coherence | host side | not modelled: the top's host ports are where they connect |

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_bgroup_decoder` | all 16 B addresses against the table, and the disabled case |
| `tb_split_row_decoder` | every address of a 1024-row subarray |
| `tb_ambit_subarray` | copy, TRA majority (random rows), DCC NOT, writes through raised cells, C rows |
| `tb_ambit_bank` | subarray select and the second-subarray refusal |
| `tb_ambit_chip` | bank routing, READ latency, TRANSFER |
| `tb_bbop_sequencer` | the exact command list of every op; every ACT/PRE spacing against the timing rules, with a randomly stalling command grant; serial and overlapped builds |
| `tb_ambit_controller` | the controller against a behavioural DRAM model with its own timing checker; parallel banks, ordinary accesses, errors |
| `tb_ambit_system` | end to end, see below |

`tb_ambit_system` covers the whole design:

* It writes random operand rows through the ordinary port.
* It runs every bbop on one row and on several rows, on two banks at once,
  and compares the results with values computed in the testbench.
* It checks the cycle count of each single-row op.
* It counts every mechanism and fails if one never happens: TRA, DCC
  inversion, overlapped and serial AAPs, bank parallelism, an ordinary
  access finishing while a bbop runs, RowClone copy and initialisation,
  multi-row ops, and the cross-subarray and range errors.

To keep simulation short it runs at 2 banks × 2 subarrays × 64 rows ×
128-bit rows. The largest configuration that has been simulated end to end
is 8 banks × 2 subarrays × 1024 rows × 8192-bit rows. The full 2 Gb default
(256 subarray instances) elaborates, but the C++ model verilator builds for
it takes hours to compile.

Run a testbench with plain verilator:

```
verilator --binary --timing --assert -Irtl rtl/ambit_pkg.sv tb/tb_ambit_system.sv \
    --top-module tb_ambit_system
./obj_dir/Vtb_ambit_system +verilator+rand+reset+2
```

Replace the testbench name to run any other one. All of them finish in
seconds.

## Remaining lint warnings

* The assertions use `disable iff (!rst_n)` on an asynchronously reset
  design. Verilator reports this as SYNCASYNCNET.
* A few row-address bits are unused at small sizes.
