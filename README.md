# DRAM Bender hardware in SystemVerilog

DRAM chips are studied (RowHammer, retention, in-DRAM computation) by sending them command
sequences that a normal memory controller would never issue: timing parameters violated on
purpose, rows activated thousands of times in tight loops, arbitrary 512-bit data patterns. The
DRAM Bender infrastructure does this with a small **programmable core on an FPGA that speaks
the DRAM command interface directly**. The host writes a program in a small ISA and loads it over
a fast link. The core then runs it with cycle-exact command timing, including loops and
branches, and streams the data it reads back to the host.

This repository holds synthesizable SystemVerilog for the FPGA side of that design. That is the
programmable core, the DRAM interface adapter, the periodic operation scheduler, the memories,
the readback FIFO and the host-link frontend. Self-checking testbenches come with it, along with
a behavioural DDR4 PHY/DRAM model. The vendor blocks of a real board are not included. These are
the PCIe DMA engine, the DDR4 PHY and the DRAM itself. They appear here as top-level ports: an
AXI4-Stream pair toward the host, and a DFI-style 4-phase command bus toward the PHY.

```
 host ──AXIS──► frontend ──► instruction memory ─┐
   ▲              │  CONFIG/START                 │ fetch (2-cycle read)
   │              ▼                               ▼
   │     periodic operation ── start/pc/src ──► programmable core ──► DRAM interface ──► DFI
   │     scheduler (ROM with 3 programs) ◄─fetch─┘  (5 stages)           adapter            (PHY)
   │                                                                          │
   └──AXIS── frontend ◄── readback FIFO (512 × 512 bit) ◄── read data ◄───────┘
```

## The instruction set and its encoding

Instructions are 72 bits wide and come in two kinds.

A **DRAM instruction** holds four 18-bit DRAM commands, issued in one fabric cycle on four
consecutive command-bus slots. Slot 0 (bits 17:0) goes first. Each command is laid out as
follows:

| bits | field |
|---|---|
| 17:12 | opcode. [17:16] are reserved (0). [15:12]: 0 none, 1 NOP, 2 ACT, 3 PRE, 4 READ, 5 WRITE, 6 REF, 7 ZQS |
| 11:8 | flags. [8] increments register A, [9] increments register B, [10] is auto-precharge (READ/WRITE) or all banks (PRE), [11] is burst chop |
| 7:4 | register B: the row for ACT, the column for READ/WRITE |
| 3:0 | register A: the bank (bank group in the top two bits) |

A **regular instruction** has bits [71:64] at zero. It is laid out as opcode [63:59], function
[56:48], RD [23:20], imm[15:4] at [19:8], RS2 or imm[3:0] at [7:4], and RS1 at [3:0]. The opcodes
are:

| op | name | effect |
|---|---|---|
| 0 | NOP | nothing |
| 1 | ARITH | RD = RS1 fn RS2. fn: 1 AND, 2 OR, 3 XOR, 4 ADD, 5 SUB, 6 MV, 7 SRC (rotate right by 1) |
| 2 | ARITHI | RD = RS1 fn imm16 (ADDI is fn 4) |
| 3 | LI | RD = imm16 |
| 4 / 5 | LD / ST | RD = sp[RS1] / sp[RS1] = RS2 (32-bit scratchpad words) |
| 6 / 7 | BL / BEQ | if RS1 < RS2 (unsigned) / RS1 == RS2, go to imm[15:4] |
| 8 | JUMP | go to imm16 |
| 9 | SLEEP | stall decode for imm16 cycles |
| 10 | LDWD | wide[32·imm16 +: 32] = RS1 |
| 11 | LDPC | RD = counter imm16: 0 cycles, 1 DRAM commands, 2 READs (since START) |
| 12 / 13 | SRE / SRX | self-refresh entry / exit |
| 14 | END | stop |
| 15 | RBHINT | wait until the readback FIFO can take imm16 more transfers |

Bits [71:66] tell the two kinds apart. A DRAM instruction always has a non-zero command in slot 3
(NOP is 1), and a regular one has zeros there. So every slot of a DRAM instruction must hold at
least a NOP.

There are sixteen 32-bit registers. R0–R12 are general purpose. R13, R14 and R15 are the bank,
row and column stride registers (BASR, RASR, CASR). A separate 512-bit **wide-data register**
supplies the data of every WRITE and can be changed only 32 bits at a time with LDWD.

## Programmable core: the pipeline and its timing

This is the part to understand before writing programs, because command timing follows from the
pipeline.

```
 fetch ─► IM read ─► IM out ─► decode ─┬─► EXE1 ─► EXE2 ─► EXE3         (execute pipeline)
  (PC)    (reg 1)    (reg 2)           └─► DRAM1 ─► DRAM2 ─► DRAM3 ─► adapter ─► DFI
```

- **Fetch** (`bender_fetch`) holds the PC and two valid bits that follow the two registered stages
  of the instruction memory. An instruction reaches decode two edges after its address was put on
  the memory.
- **Decode** (`bender_decode`) turns a DRAM instruction into one DRAM micro-op with four slots. It
  turns a regular instruction into one execute micro-op, or into nothing for NOP, SLEEP and
  RBHINT. SRE and SRX become DRAM micro-ops with the command in slot 0. SLEEP and RBHINT act by
  stalling decode (`stall`), which freezes fetch. BL, BEQ, JUMP and END raise `hold`, which empties
  the fetch stages until the branch resolves.
- **Execute pipeline** (`bender_exec_pipe`):
  - EXE1 is the registered micro-op out of decode.
  - EXE2 reads the operands from the register file and does everything that writes: ALU results,
    LI, LDPC, LDWD, ST, and the scratchpad read of LD. It also compares branch operands.
  - EXE3 writes the LD result back through a separate load port and sends the branch target
    (`redirect`) to fetch.
- **DRAM pipeline** (`bender_dram_pipe`):
  - DRAM2 reads the address registers for all four slots and applies the post-increments.
  - DRAM3 registers one-hot strobes per command type (`act[3:0]`, `rd[3:0]`, …), plus bank and
    address per slot and the wide-data word for WRITEs.

Results that follow from this structure, all checked by the testbenches:

| situation | distance |
|---|---|
| two DRAM instructions in a row | 1 fabric cycle = 4 command slots; both leave on consecutive cycles |
| commands in one DRAM instruction | 1 slot apart (1.5 ns at DDR4-1333 with a 4:1 PHY) |
| DRAM instruction, SLEEP n, DRAM instruction | n + 2 cycles between the two commands |
| one regular instruction between two DRAM instructions | 2 cycles |
| taken or not-taken branch | next instruction decoded 6 cycles after the branch: 2 (EXE2, EXE3) + 1 (redirect edge) + 2 (memory) + 1 |
| loop {ACT; ADDI; BL} | one ACT every 8 cycles |

Every latency is fixed and does not depend on data. The only variable delay is a RBHINT waiting
for FIFO space, and that happens before a command sequence starts, never inside one. A program's
command timing can therefore be worked out from its listing.

**Register-file ports and the load bypass.** Both pipelines read and write the register file in
their second stage. A regular instruction right after LD needs the loaded value in EXE2, while
the LD itself is in EXE3. The load port is therefore bypassed combinationally onto the read
output (`bender_regfile`): `ADD R4, R3, R3` directly after `LD R3` sees the new R3. The write
priority is port A (execute) > bulk port (DRAM increments) > load port. The first two never write
in the same cycle, because decode sends one micro-op per cycle.

**Address post-increment.** Each slot reads bank = reg[A] and address = reg[B], using values
already updated by the earlier slots of the same instruction. If flag [8] is set, reg[A] is then
incremented by BASR. If flag [9] is set, reg[B] is incremented by RASR (ACT) or CASR
(READ/WRITE). PRE never increments B. The updated registers are written in DRAM2, so the next
instruction sees them. For example, `{ACT inc-A, NOP, ACT, PRE-all}` with BASR = 1 activates
banks b and b+1 in one cycle.

## Readback hints and the readback FIFO

The host link is slower than the DRAM, so read data is buffered in a 512-entry × 512-bit FIFO
(32 KiB, `readback_fifo`). A READ issued while the FIFO is full would lose data. Stalling a
command sequence halfway would break its timing. The core therefore stalls only before a
sequence, at a RBHINT instruction.

`RBHINT n` stays in decode until `credit ≥ n`, where
`credit = free FIFO entries − READs already issued whose data has not arrived yet`
(`bender_core`: `pending_reads` rises when decode accepts READs and falls on each returned
transfer). The host software places `RBHINT n` in front of each run of DRAM instructions that
holds n READs. A program without hints can still overflow the FIFO. The transfer is then dropped
and a sticky `rb_overflow` flag is set, which the host clears with a CLROVF packet.

The FIFO shows its oldest entry on its output whenever it is not empty. A push and a pop in the
same cycle always succeed, even when the FIFO is full.

## Periodic operation scheduler

DDR4 needs refresh and ZQ calibration, and the PHY needs occasional reads to keep its read timing
calibrated. The scheduler (`periodic_op_scheduler`) keeps three small programs in its own ROM,
each built from instructions of the same ISA:

| program | ROM base | period | contents |
|---|---|---|---|
| periodic READ | 0 | `PRD_PERIOD` = 167 cycles (≈1 µs) | PRE-all, ACT bank 0 row 0, READ col 0, PRE-all |
| ZQS | 16 | `ZQ_PERIOD` = 21,333,333 cycles (128 ms) | PRE-all, ZQCS, wait tZQCS |
| refresh | 32 | host-set `ref_period`, off after reset | PRE-all, REF, wait tRFC |

When a timer expires, its operation is marked pending. The scheduler starts programs on the same
core, with `start_src` = 1 so that fetch reads the ROM. It does so **only when the core is
idle**: no program running, both pipelines empty, no READ outstanding. The priority is refresh,
then ZQS, then periodic READ, then the user program that the host asked for with START. A
maintenance program never interrupts a user program. The price is that refresh is late by as
much as the running program's length. An experiment that must run for a long time under refresh
has to end and restart its programs. Periodic-READ data is dropped before the FIFO, because the
core tells the top which program is running (`cur_src`). The maintenance programs use R12 as their
address register, so user programs must not rely on R12 across runs.

## DRAM interface adapter

`dram_adapter` turns the DRAM pipeline's one-hot strobes into DDR4 command pins for four DFI
phases per fabric cycle: CS_n, ACT_n, RAS_n/CAS_n/WE_n (A16–A14 on ACT), BG, BA, A13–A0 and CKE.
It also sets write-data enable, and registers everything once. The encodings are those of the
DDR4 command truth table: SRE is the REF encoding with CKE falling, SRX raises CKE while the phase
is deselected, and ZQS is ZQCS (A10 low). Write data is the wide-data word captured in DRAM3. Read
data from the PHY goes through one register toward the FIFO. To support another DRAM standard,
this module is the one to replace.

## Frontend and host protocol

`bender_frontend` sits behind the PCIe DMA engine on a 256-bit AXI4-Stream. Every host beat starts
with a type in bits [3:0], except for the instruction words that follow a LOAD:

| type | packet |
|---|---|
| 1 LOAD | [31:16] N, [47:32] start address; then N beats, each carrying one instruction in [71:0] |
| 2 START | run the user program from address 0 when the scheduler lets it |
| 3 CONFIG | [4] refresh on, [5] ZQS on, [6] periodic READ on, [63:32] refresh period in cycles |
| 4 CLROVF | clear the readback overflow flag |

Each readback entry goes to the host as two beats, low half first, with tlast on the second beat.
`program_done` pulses when END retires.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `dram_bender_top` | IMEM_DEPTH | 2048 | instructions |
| | SP_DEPTH | 1024 | 32-bit scratchpad words |
| | RB_DEPTH | 512 | readback FIFO entries of 512 bits |
| | AXIS_W | 256 | host stream width |
| | PRD_PERIOD / ZQ_PERIOD | 167 / 21,333,333 | maintenance periods in cycles |

The memory sizes are those of the original prototypes. The stream width and the two periods are
this design's choices: a 166.67 MHz fabric clock, that is DDR4-1333 with 4:1 clocking.

## Where this design departs from, or adds to, the original

- The **numeric encodings** are this design's own: opcodes, function codes, flag bits, the DRAM-
  versus-regular rule, and the LDWD/LDPC operand meaning. The field positions of the 18-bit
  command and the 72-bit regular instruction follow the published encoding figure.
- **RBHINT** is an instruction of this design. In the original, the host API inserts readback
  hints, but their encoding is not published.
- **SLEEP counts fabric cycles** (4 command slots each). The original API gives delays in
  command-bus cycles; finer delays come from NOP slots.
- The **PHY interface** is a generic DFI-style 4-phase bus, not a specific vendor PHY's ports.
  There is one rank: no second chip select, so dual-rank modules would need an extra CS bit.
- The **maintenance programs**, their periods, their priority and the rule that they wait for an
  idle core are this design's choices. The original states only that three programs exist, with
  fixed periods for periodic READ and ZQS and a configurable period for refresh.
- The host link packet format is this design's own.
- Not built: the PCIe DMA engine, the DDR4 PHY, a DDR3 adapter, the host API, the debugger and
  the temperature controller.

## Verification and how far to trust it

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. They compare against reference models or against values
worked out by hand, and each one has a watchdog:

| testbench | what it establishes |
|---|---|
| `tb_instr_mem`, `tb_data_scratchpad` | contents and read latency (2 cycles and 1 cycle) |
| `tb_bender_regfile` | port priority, load bypass, wide-data word writes |
| `tb_bender_fetch`, `tb_bender_decode` | PC sequence, stall, hold, redirect; micro-op fields; SLEEP n = n stall cycles; RBHINT thresholds, including negative credit |
| `tb_bender_exec_pipe`, `tb_bender_dram_pipe` | random micro-ops against an ISA model; post-increment chains within an instruction |
| `tb_bender_core` | 8-cycle branch loop, SLEEP timing, four commands in one cycle, ST/LD bypass, BEQ/JUMP, at most `credit` READs in flight |
| `tb_dram_adapter` | the DDR4 truth table on all four phases and CKE for SRE/SRX |
| `tb_periodic_op_scheduler` | grant counts per period, the priority order, starts only when idle, ROM contents |
| `tb_readback_fifo`, `tb_bender_frontend` | queue model, overflow flag, packet decoding, two-beat readback |
| `tb_dram_bender_top` | end to end at reduced sizes (4-entry FIFO, short periods); listed below |
| `tb_dram_bender_full` | end to end at the default sizes: write and read four columns, with a periodic READ in between |
| `tb_workloads` | at the default sizes: a double-sided RowHammer loop swept over the interleaving factor T (ACT order, ACT→PRE and ACT→ACT spacing, victim rows read back), and ACT–PRE–ACT sequences with gaps of 1–10 command slots measured on the DFI phases |

`tb_dram_bender_top` checks these end to end:

- data written by a branch loop is read back correctly;
- write-loop spacing is 9 cycles;
- ACT to WRITE across SLEEP 3 is 5 cycles;
- the load bypass and the ALU results are correct, and so are LDPC values of 8 READs and 18 commands;
- the multi-slot instruction's phases;
- readback-hint stalls while the host holds tready low;
- overflow and CLROVF;
- self-refresh entry and exit;
- refresh, ZQS and periodic READ all run, with no maintenance command during a user program and no
  periodic-READ data at the host.

`tb/ddr4_phy_model.sv` stands in for the PHY and the DRAM. It decodes the DFI phases, stores
written bursts and returns READ data after 6 cycles. It models no DRAM timing checks and no
disturbance effects. The testbenches therefore show that the commands and their spacing are what
the program asked for. They do not show that a real DRAM accepts those commands.

## Simulating

The testbenches use only Verilator 5 features (`--timing`) and need no C++ code. From the
repository root:

```
verilator --binary --timing --timescale 1ns/1ps --assert -Wno-fatal -Irtl -Itb rtl/bender_pkg.sv tb/bender_prog.sv \
    tb/tb_dram_bender_top.sv -y rtl -y tb +libext+.sv --top-module tb_dram_bender_top -o sim
./obj_dir/sim
```

To run a different test, replace the testbench file and `--top-module`. `tb/bender_prog.sv` is a
small assembler package (`i_li`, `i_dram1`, `i_bl`, …). Use it to write new test programs as
SystemVerilog queues of 72-bit words, and load them with the LOAD packet as `tb_dram_bender_top`
does.
