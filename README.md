# RV32I46F_5SP: a five-stage RV32I teaching core and its FPGA test SoC

This is a small in-order RISC-V processor built to be read and understood. It
implements the RV32I base integer instruction set, the Zicsr CSR instructions,
and machine-mode traps for ECALL, EBREAK and MRET. It does this in the classic
Patterson & Hennessy five-stage pipeline: IF, ID, EX, MEM, WB. The design
adds the three features a textbook pipeline needs before it runs real
programs at a useful speed:

* full operand forwarding, so dependent instructions rarely wait;
* a 2-bit dynamic branch predictor in the fetch stage, with branches
  checked in EX;
* a trap controller that saves `mepc`/`mcause` and jumps to `mtvec`.

A small system-on-chip wraps the core for bring-up on an FPGA board. Push
buttons either single-step the core one clock at a time or start a benchmark.
A UART prints register values, the current PC and instruction, and the
benchmark's cycle and instruction counts, which are read from the
`mcycle`/`minstret` counters.

The published design this RTL follows reports 1.09 DMIPS/MHz for Dhrystone
2.1 at 50 MHz on an Artix-7 board: 646,640 instructions in 1,043,092 cycles,
a CPI of 1.61. This RTL was not run on Dhrystone (see *Status* below).

All files are SystemVerilog (IEEE 1800-2017). Each file starts with a
comment that describes its module, its interface and its timing, and says
which parts follow the original design and which are choices made here.

## Block map

```
soc_46f5sp                      board-level top (clk, reset_n, 5 buttons, UART TX, 8 LEDs)
├── button_controller           sync + debounce + one-cycle pulses
├── rv32i46f_5sp                the core
│   ├── IF:  program_counter, pc_plus4, instruction_memory, branch_predictor, pc_controller
│   ├── ID:  instruction_decoder, imm_gen, control_unit, register_file, csr_file,
│   │        exception_detector, trap_controller
│   ├── EX:  forward_unit, alu_controller, alu, branch_logic
│   ├── MEM: be_logic, data_memory
│   ├── pipeline_register ×4    IF/ID, ID/EX, EX/MEM, MEM/WB (struct-typed)
│   └── hazard_unit
├── benchmark_controller        runs the core, records cycles / instructions
├── debug_uart_controller       formats messages as ASCII hex
└── uart_tx                     8N1 transmitter
```

`rv32_pkg` holds what the core's modules share: the opcodes, the CSR
addresses, the control bundle `ctrl_t`, the ALU and write-back encodings, and
one struct per pipeline register (`if_id_t`, `id_ex_t`, `ex_mem_t`,
`mem_wb_t`). Each pipeline register is one `pipeline_register` instance with
its struct as the type parameter. A flush loads an invalid bubble; a stall
holds the register.

## The pipeline, stage by stage

**IF.** The PC addresses the instruction memory. Its read is asynchronous,
because the FPGA build maps every memory to LUT RAM. At the same time the
branch predictor looks at the fetched word. If it is a conditional branch and
the predictor's 2-bit counter is in a "taken" state (10 or 11), the next PC
becomes `pc + B-immediate`. The taken path is then fetched on the next cycle,
so a correctly predicted taken branch costs nothing. The next PC is chosen
in this priority order:

1. the trap target (`mtvec`, or `mepc` for MRET);
2. the correction from EX (a jump or a misprediction);
3. the predicted target;
4. `pc + 4`.

**ID.** The decoder splits the instruction into fields, the immediate
generator builds the immediate, and the control unit produces `ctrl_t`. Two
more things happen here:

* The register file and the CSR file are read. Both pass through a write
  that happens in the same cycle, so a value being written back in WB is
  seen in ID without waiting.
* The exception detector recognises ECALL, EBREAK, MRET and illegal
  opcodes.

**EX.** The forward unit supplies the operands (see below). The ALU
controller picks the operation from the control unit's 2-bit ALUOp class
together with funct3/funct7. Branches use the ALU to compare: SUB for
BEQ/BNE, checked through the zero flag, and SLT/SLTU for the others, checked
through bit 0 of the result. The branch logic then compares the real outcome
with the prediction made in IF. JAL and JALR are also resolved here. Their
target is the ALU sum (PC+imm, or rs1+imm with bit 0 cleared), and they
always redirect. CSR instructions compute the new CSR value here: write,
set or clear, with a register or a 5-bit immediate.

**MEM.** The byte-enable logic places store data on the right byte lanes
(SB/SH/SW), and extracts and extends load data (LB/LH/LW/LBU/LHU). The value
an instruction will write back (ALU result, load data, CSR old value, U
immediate or PC+4) is selected here and carried in MEM/WB. The same
selection, minus load data, feeds the forward unit.

**WB.** The register file and the CSR file are written. `minstret` counts
every valid instruction that leaves WB.

## Hazards: what stalls, what forwards, what flushes

The hazard unit is the part to understand first when changing the pipeline.
Everything in it is combinational.

| situation | detection | action | cost |
|---|---|---|---|
| EX needs a register written by the instruction in MEM | `hazard_mem[i]` | forward the MEM-stage value | 0 |
| EX needs a register written by the instruction in WB | `hazard_wb[i]` | forward the WB value | 0 |
| ID reads a register being written in WB | register-file write-through | none | 0 |
| EX reads a CSR written by the instruction in MEM / WB | `csr_hazard_mem` / `csr_hazard_wb` | forward the pending CSR write value | 0 |
| ID needs the result of a load that is in EX | `load_use` | hold PC and IF/ID, bubble into ID/EX | 1 cycle |
| branch outcome differs from the prediction, or JAL/JALR | `ex_redirect` from branch logic | flush IF/ID and ID/EX, fetch the right address | 2 cycles |
| trap or MRET in ID | trap controller busy | hold PC and IF/ID, bubbles into ID/EX | see below |

MEM-stage forwarding has priority over WB because MEM holds the younger
result. A load in MEM never needs to forward, because the load-use stall has
already moved the dependent instruction one cycle later. `x0` never
forwards.

## Traps and MRET

When the exception detector flags the instruction in ID, the trap controller
takes over. The trap is not taken if EX is redirecting in that same cycle,
because the instruction then lies on a discarded path. The sequence is:

| cycle | state | what happens |
|---|---|---|
| 0 | detect | PC and IF/ID frozen; bubbles start entering EX |
| 1, 2 | DRAIN1, DRAIN2 | the older instructions in EX/MEM/WB finish, including their CSR writes |
| 3 | W_MEPC | `mepc` ← PC of the trapping instruction (trap port of the CSR file) |
| 4 | W_MCAUSE | `mcause` ← 11 (ECALL), 3 (EBREAK) or 2 (illegal) |
| 5 | REDIRECT | PC ← `mtvec`; IF/ID flushed |

MRET skips the two write states and redirects to `mepc` in cycle 3. Because
the pipeline has drained, `mtvec` and `mepc` are read with every older write
already done, so no CSR forwarding is needed on this path. The trapping
instruction does not retire. As in the privileged specification, `mepc`
points at the trapping instruction, so a handler that wants to resume after
an ECALL must add 4 itself. `mstatus` is not changed by traps, and there are
no interrupts and no misaligned-access traps. Full privileged-architecture
trap handling was left as future work by the original design.

## Memories and the address map

* Instruction memory: 4096 words (16 KiB), asynchronous read. It has a
  second read port for the data side and a write port (`prog_*`) for
  loading programs.
* Data memory: 4096 words (16 KiB), asynchronous read, byte write enables.
* Byte addresses with bits [31:28] = 0 are the instruction memory. Loads
  from that region go through the second port, so read-only data and
  constants placed next to the code can be read. This is the "bypass path
  between instruction and data memory" the original design used to fix a
  memory-map conflict. Stores to that region are dropped.
* All other addresses are the data memory; in the tests it sits at
  `0x1000_0000`. Both memories wrap at their size.

Neither the sizes nor the address map were published; they are choices made
here. To change them, set `IMEM_WORDS`/`DMEM_WORDS` and edit `mem_is_rom` in
`rv32i46f_5sp.sv`.

## CSRs

| CSR | address | behaviour |
|---|---|---|
| `mstatus` | 0x300 | MIE/MPIE bits writable; MPP reads 11 |
| `misa` | 0x301 | read-only 0x40000100 (RV32I) |
| `mtvec` | 0x305 | direct mode only |
| `mscratch` | 0x340 | read/write |
| `mepc` | 0x341 | read/write |
| `mcause` | 0x342 | read/write |
| `mcycle`, `mcycleh` | 0xB00, 0xB80 | read/write |
| `minstret`, `minstreth` | 0xB02, 0xB82 | read/write |
| `cycle`, `instret` and their `h` halves | 0xC00, 0xC02, 0xC80, 0xC82 | read-only aliases |

`mcycle` counts the cycles in which the core's clock enable is high, not
wall-clock cycles. CSRs are read in ID, so a read of `minstret` does not yet
include the up to three older instructions still in EX, MEM and WB. Any other address reads as 0.

## The SoC: stepping, benchmarking, printing

The core has a clock enable, `en`. When it is low, no register, memory or
counter in the core changes. In the SoC the enable is
`bench_running | step_pulse`:

* **Up button**: one enabled clock per press. This is instruction-level
  debugging; `mcycle` advances by exactly one per press.
* **Center button**: starts a benchmark. The benchmark controller stores
  `mcycle` and `minstret` and holds the enable high. The run ends when the
  program retires `jal x0, 0` (a jump to itself, the usual end of a
  bare-metal program). The controller then stores the differences as
  `final_cycles` / `final_instructions` and sets `bench_done`. The halt
  instruction itself is not counted.
* **Left button**: prints the result in the same layout as the original
  board's terminal output. Two lines of 16 hex digits: the cycle count, then
  `Instr: ` and the instruction count. If no benchmark has finished, the
  live counters are printed instead.
* **Down button**: prints the last register write, e.g. `x1D: 00000001`.
* **Right button**: prints the retiring PC and instruction,
  e.g. `PC: 000001A4 Instr: 00A58593`.

Every button is synchronised and debounced: a level must be stable for
`DEBOUNCE_CYCLES` clocks, 10 ms at 50 MHz. The UART runs 8N1 at
`CLKS_PER_BIT` = 434 clocks per bit, which is 115,200 baud at 50 MHz.

The active-low CPU reset button is synchronised into an active-high
synchronous reset. The LEDs show:

* `led[0]`: benchmark running;
* `led[1]`: benchmark done;
* `led[7:2]`: the low bits of the EX-stage ALU result.

The button mapping, the message formats other than the result, the baud
rate, the debounce time and the LED use were not published; they are
choices made here.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rv32_pkg.sv tb/tb_rv32i46f_5sp.sv --top-module tb_rv32i46f_5sp -Mdir obj -o sim
obj/sim
```

Replace the testbench name to run another one. The ones that cover the
most:

* `tb_rv32i46f_5sp`: the core runs a hand-assembled program of 48 instructions.
  The program covers:
  * arithmetic with back-to-back dependences;
  * every load/store size;
  * a load-use pair;
  * a loop trained into the predictor, plus a forward branch it predicts
    correctly and one it mispredicts;
  * JAL/JALR;
  * CSR writes read back immediately;
  * an ECALL and an EBREAK handled by a trap handler that returns with MRET;
  * a load from the instruction memory.

  The clock enable is dropped on random cycles. The testbench checks 28
  registers, 4 memory words and the instruction count (73), and fails if
  any of these mechanisms never happened. The program takes 112 enabled
  cycles from reset until the halt retires. Run as a benchmark in the SoC,
  the same program reports 109 cycles for 73 instructions (CPI ≈ 1.5),
  because there the counting starts after three single steps.
* `tb_core_random`: eight random programs of about 300 instructions each,
  checked against a sequential instruction-set model in the testbench. Each
  program ends with the final registers, the data memory and the retired
  count compared with the model. The programs include:
  * every ALU, load, store, branch and jump form;
  * loads from the instruction memory;
  * back-to-back CSR accesses;
  * ECALL, EBREAK and illegal words, handled by a trap handler.

  Source registers are mostly drawn from recent destinations, so forwarding,
  load-use stalls, mispredictions and traps in the shadow of a branch all
  happen many times. Different simulator seeds give different programs.
* `tb_soc_46f5sp`: the whole SoC, driven only through its pins. It loads
  the same program, single-steps three times, runs it as a benchmark and
  decodes all three UART messages with a receiver model. It uses short
  debounce and bit times.
* `tb_soc_46f5sp_full`: the same test with every SoC parameter at its
  default. It takes about 3 million clocks, a few seconds in Verilator.

`tb/rv_asm_pkg.sv` has one encoder function per instruction (`ADDI(rd, rs1,
imm)`, `BNE(rs1, rs2, offset)`, `CSRRW(rd, csr, rs1)`, …), so new test
programs can be written as lists of instructions. A program can also be
loaded from a hex file through the `INIT_FILE` parameter of
`instruction_memory`, or written through the `prog_*` port while reset is
held.

## Where this RTL departs from, or adds to, the original design

* Sizes: memory sizes and the address map, the UART baud rate and the
  debounce time are choices made here (see above).
* Predictor: a single global 2-bit counter. The original only says "2-bit
  dynamic", not how many counters it has or how they are indexed. Jumps are
  not predicted.
* Forwarding sources: forwarding is said to come "from the EX, MEM and WB
  stages". Here that is read as the classic arrangement. The results held in
  EX/MEM and MEM/WB feed the EX-stage operands, and the register file's
  write-through covers ID. No result is forwarded out of the ALU within the
  same cycle.
* Write-back mux: the write-back value is selected in MEM, not after MEM/WB.
  The mux codes 001 (memory), 100 (U immediate) and 101 (PC+4) match the
  published diagram; 010 (ALU) and 011 (CSR) are assumed.
* Control signals not used: `CSR_Ready` and the `Trap_Done` input of the
  control unit, both drawn in the core diagram, are not used. CSR reads
  complete in one cycle, and the trap controller stalls the front end
  directly.
* Debug blocks: the "Debug Interface" and "Debugger" blocks of the core
  diagram are not built, because their function was never described. The
  SoC's debug needs are met by the core's `dbg_*` outputs.
* Illegal instructions: they trap with `mcause` = 2. FENCE is a no-op.
  Misaligned loads and stores are not trapped.
* Program loading: the `prog_*` port is an addition.

## Status

All blocks above are written and each has its own self-checking testbench.
The core agrees with the instruction-set model over many random programs,
including traps.
For each module a deliberately broken copy was used to confirm that its
testbench fails. The following are not verified:

* The design has not been run against the RISC-V compliance suite.
* It has not been run on Dhrystone. Dhrystone's roughly 11 KiB of data and
  a few KiB of code should fit the default 16 KiB memories, but this was not
  tried.
* It has not been placed on an FPGA.

Cycle counts will therefore not exactly match the published 1,043,092.
