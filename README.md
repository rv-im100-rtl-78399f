# RV-IM100: an 8-stage RV64IM soft core and its benchmark SoC

This is a 64-bit RISC-V processor: RV64I with the M extension (multiply and divide) and Zicsr (control and status registers). Its pipeline is eight stages deep and was built to reach about 100 MHz on an FPGA. Around the core is a small system on chip (SoC) that runs bare-metal benchmarks (Dhrystone, CoreMark) and reports their results over a UART.

The design was reached step by step from a classic 5-stage pipeline. Each stage added cuts one critical path, and each one costs some IPC (instructions per clock):

- **IO (instruction out)** absorbs the one-cycle read latency of the synchronous instruction Block RAM (BRAM).
- **BR (branch)** takes branch resolution out of the ALU cycle.
- **EXR (execution ready)** takes forwarding and operand selection out of the ALU cycle.

The RTL here implements that final configuration, called 72F8SP: 72 supported instructions (the 59 of RV64I with Zicsr plus the 13 of M), 8-stage pipeline. It is written for simulation with Verilator and for FPGA or ASIC synthesis. Every block has a self-checking testbench.

## The eight stages

| Stage | Work done |
|---|---|
| IF  | The PC addresses the instruction BRAM. The PC controller chooses the next PC. |
| IO  | The instruction word arrives from the BRAM. The branch predictor looks at it. When it predicts a conditional branch taken, it redirects fetch to PC + B-immediate. |
| ID  | Format and field decode, control unit, immediate generator, register-file and CSR reads. |
| EXR | Hazard detection, forwarding and operand-source selection. The resolved operands are registered. |
| EX  | The ALU only: 64- and 32-bit datapaths side by side, plus the multiplier and divider. |
| BR  | Branch decision on the *registered* ALU result and zero flag. Jump and misprediction redirects, exception detection, trap entry and MRET. The registered ALU result also goes to the data BRAM as the load address. |
| MEM | Load data arrives from the data BRAM and is aligned and sign/zero-extended. Stores write the BRAM, or leave on the MMIO port. |
| WB  | Register-file and CSR writes. |

Each pipeline register is the same module, `pipe_reg`, with a different struct type from `rv_pkg`. Its control inputs are:

- **clock enable:** the whole SoC can be paused;
- **hold:** keeps the current contents (stall);
- **flush:** loads an all-zero bubble; flush wins over hold.

## Why the penalties are what they are

The stage split fixes when each value exists. That in turn fixes every hazard penalty. The core testbench measures these numbers cycle by cycle:

| Event | Cost (lost cycles) | Reason |
|---|---|---|
| Back-to-back dependency (execution-use) | 1 | The consumer reaches EXR while the producer is still in EX. It waits one cycle, then takes the value from BR. |
| Load followed by a use | 2 | One cycle as above. One more because the load's data only exists once it reaches MEM. |
| Taken jump (JAL/JALR) or misprediction | 5 | Both resolve in BR. Five younger instructions (IF, IO, ID, EXR, EX) are flushed. |
| Branch predicted taken in IO | 1 | The instruction fetched behind the branch is squashed. |
| Load in BR right behind a store in MEM | 1 | `write_done`: the single data-BRAM port is busy with the store write. |
| MUL/MULH/MULW | 3 | The 3-stage multiplier freezes the pipeline until its result is ready. |
| DIV/REM (64-bit) | 67 | The restoring divider takes N + 3 clocks: setup, N iterations, sign fix-up, result. |
| DIVW/REMW (32-bit) | 35 | Same divider structure, with N = 32. |
| CSR instruction behind an in-flight CSR write | until the write reaches WB | CSR values are not forwarded. |

The branch predictor is one 2-bit saturating counter shared by all branches. Its reset state is 01 (weakly not-taken). It keeps no history and has no target buffer. Branches resolved in BR train it.

## Forwarding

EXR forwards from three sources, BR, MEM and WB. The newest matching producer wins:

- **BR:** the registered ALU result, or PC + 4, an immediate or a CSR value, depending on the write-back source.
- **MEM:** the load data straight from the BRAM after alignment, or, for any other instruction, a value already chosen in BR and registered. So MEM's forwarding path is only the alignment logic and one 2:1 choice.
- **WB:** the final write value.

Selection is one-hot. A priority chain produces a 4-bit select {WB, MEM, BR, register file} for each operand. The data is then combined with AND-OR terms rather than a cascade of 2:1 multiplexers, which keeps the path shallow.

There is no fourth "retire" source for an instruction that has just left WB. The register file writes through, so a read in ID sees a write from WB in the same cycle. One case remains: an instruction stalled in EXR whose producer leaves WB during the stall. The ID/EXR register handles it by refreshing its stored operands from the forwarding network every stalled cycle. CSR values are never forwarded; the stall in ID covers that case.

## Multiply and divide

The ALU holds two copies of each M unit: a 64-bit (DWORD) one and a 32-bit (WORD) one. The instruction width chooses which result is used.

**Multiplier.** It has three registered steps:

1. Take absolute values according to the MULH/MULHSU/MULHU signedness.
2. Form the unsigned product. The 64-bit version builds it from four 32x32 partial products, which map onto DSP slices.
3. Accumulate the partial products and correct the sign.

**Divider.** It is a restoring divider with one shift register that holds remainder and quotient together. It has four states: IDLE, SETUP, CALCULATE (N cycles) and DONE. SETUP takes absolute values. DONE applies the signs and the RISC-V results for divide-by-zero and signed overflow.

**Freezing the pipeline.** The ALU controller pulses `mul_start` or `div_start` once for each M instruction in EX. The hazard unit then freezes every pipeline register until `md_done`.

## Memories and the data path

**Instruction memory.** A 16384 x 32-bit synchronous BRAM (64 KiB).

**Data memory.** An 8192 x 64-bit synchronous BRAM (64 KiB) with a byte write mask.

**Load timing.** The load address leaves the pipeline one stage early: it is the BR-stage registered ALU result. The data therefore arrives exactly when the load reaches MEM, and no extra stage is needed.

**Stores.** A store writes in MEM, using `be_logic` to build the byte mask and lane shift. That occupies the single port, so a load in BR behind a store waits one cycle (`write_done`).

**Load extraction.** On loads, `be_logic` picks the addressed bytes out of the 64-bit word and extends them. This covers LB/LH/LW/LD and the unsigned forms, including LWU.

## Traps and CSRs

The core runs in machine mode only. It implements these CSRs:

- mstatus (MIE/MPIE; MPP reads as machine mode)
- misa
- mie (storage only; there are no interrupts)
- mtvec (direct mode)
- mscratch, mepc, mcause, mtval
- mcycle and minstret, with the read-only cycle and instret aliases

Exceptions are detected in BR and take effect there. They are:

- illegal instruction
- ECALL and EBREAK
- misaligned jump or branch target
- misaligned load or store

On an exception:

1. The trap controller writes mepc, mcause and mtval, and copies MIE into MPIE.
2. It flushes the trapping instruction and the five younger ones.
3. It redirects fetch to mtvec.

MRET returns to mepc and restores MIE.

FENCE, FENCE.I and WFI execute as no-ops. There are no caches, and the only memory-mapped device is write-only.

## The SoC

```
           prog_* (program load)
                 |
      +----------+-----------+
      v                      v
  instr BRAM <--> rv64im_core <--> data BRAM
                      | MMIO stores (addr >= 0x1000_0000)
                      v
                 mmio_interface --> uart_controller --> uart_tx --> uart_txd
                                        ^      |
                                  btn_up      benchmark_start
  leds = {~cpu_clk_enable, opcode of the instruction in WB}
```

**Memory map.** Instruction fetch and data accesses use separate 64 KiB spaces, starting at 0. A store at or above 0x1000_0000 leaves the core on the MMIO port. A byte store to 0x1000_0000 is sent out of the UART (8N1; 868 clocks per bit, which is 115200 baud at 100 MHz).

**UART back-pressure.** The UART controller holds one byte while the transmitter is busy. While it cannot take another, it raises `busy`. The core then holds the UART store in MEM and freezes the pipeline behind it, so no byte is ever lost.

**Button.** The UP button is synchronised, and its rising edge gives a one-cycle `benchmark_start` pulse.

**Reset and pausing.** `cpu_reset_n` is active low and synchronised with two flops. `cpu_clk_enable` pauses the whole core.

**Program load.** Programs are loaded through `prog_we`/`prog_dmem`/`prog_addr`/`prog_data`, one 32-bit word per clock, while the core is held in reset:

- `prog_dmem = 0` writes instruction word `prog_addr`.
- `prog_dmem = 1` writes the data BRAM at byte address `4*prog_addr`. This is for initialised data and constants.

## Files

**Package.**
- `rtl/rv_pkg.sv`: opcodes, ALU operations, control word, pipeline-register structs, CSR addresses, memory map.

**Fetch.**
- `program_counter`, `pc_controller`, `instr_mem`, `branch_predictor`.

**Decode.**
- `instr_decoder`, `imm_gen`, `control_unit`, `register_file`, `csr_file`.

**Execute and memory.**
- `forward_unit`, `hazard_unit`, `alu_controller`, `alu`, `multiplier`, `divider`, `branch_logic`, `be_logic`, `data_mem`.

**Traps.**
- `exception_detector`, `trap_controller`.

**Tops.**
- `rv64im_core`: the pipeline.
- `rv_im100_soc`: the SoC top.

**SoC devices.**
- `mmio_interface`, `uart_controller`, `uart_tx`.

**Testbenches.** `tb/tb_<module>.sv` is the testbench for each module. Two packages support them:
- `tb/rv_asm_pkg.sv`: a small assembler, as functions that return instruction words.
- `tb/rv_ref_pkg.sv`: an independent instruction-level RV64IM_Zicsr reference model.

The core and SoC testbenches run generated programs on the RTL and on the model, and compare registers, memory and UART output.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops by itself (each has a watchdog). With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
  rtl/rv_pkg.sv tb/rv_asm_pkg.sv tb/rv_ref_pkg.sv tb/tb_rv_im100_soc.sv \
  --top-module tb_rv_im100_soc
./obj_dir/Vtb_rv_im100_soc
```

`-y rtl` lets Verilator find each module in the file of the same name. The RTL itself builds without warnings at Verilator's default warning level. The testbenches do not: they assign 32-bit `$urandom` values to narrower signals, which gives width warnings. `-Wno-fatal` keeps those warnings from stopping the build.

Replace the testbench name to run another one. `tb_rv_im100_soc` runs the SoC at its full default size. It does the following:

1. Loads a program and a data constant through the load port.
2. Releases reset and runs the program. The program computes a sum of squares, divides and takes a remainder, loads the constant, and prints five bytes over the UART.
3. Decodes the serial line at the bit level.
4. Checks the reset-to-first-retire, button-to-pulse and UART bit-period latencies.
5. Counts each mechanism: UART back-pressure stalls, M-unit freezes, pause cycles and LED updates.

`tb_rv64im_core` runs random and directed programs against the reference model. It counts every hazard class, forwarding source, misprediction, jump, trap and MRET, and it measures the penalty table above.

`tb_workload_coremark_crc` runs CoreMark's CRC-16 kernel on the full-size SoC. That kernel is `crcu8`, applied to every byte of a 256-byte random buffer. The program times itself with `mcycle`, as the benchmark does, and prints the CRC and the cycle count over the UART. The testbench checks the CRC against a bit-exact copy of `crcu8`. It checks the register state against the reference model and the cycle count against the counter registers. The loop is dense in branches and dependencies: 16351 instructions take 31293 cycles, a CPI of about 1.9.

`tb_workload_dhrystone_kernel` does the same for Dhrystone's loop operations, over 20 iterations on the full-size SoC. Each iteration does three things:

1. It copies the benchmark's 30-character string byte by byte.
2. It compares the copy with the second string.
3. It evaluates the benchmark's multiply/divide integer statements.

The UART output, registers, copied string and cycle count are checked against the reference model. 5781 instructions take 13929 cycles, a CPI of about 2.4: byte loads feed branches directly, and there is a 67-cycle divide per iteration.

## How far this follows the original design, and where it departs

**From the original description:**
- the stage list and the work done in each stage;
- the synchronous instruction and data BRAMs, with the BR-stage address presentation;
- the `write_done` stall;
- the execution-use hazard and the 5-cycle flush depth;
- the shared 2-bit saturating-counter predictor;
- the 3-stage multiplier and the restoring divider with its combined shift register;
- the dual-width ALU;
- forwarding from BR, MEM and WB with one-hot selection, and no retire or CSR forwarding;
- exception detection in BR;
- the SoC block set (MMIO interface, unified UART controller, UART transmitter, UP button, LEDs showing the opcode and the clock-enable state);
- the write-back source codes (001 MEM, 010 ALU, 011 CSR, 100 immediate, 101 PC + 4).

**Choices made here, because the original is silent:**
- memory sizes (64 KiB each);
- the memory map and UART address;
- the baud rate;
- the CSR set;
- the predictor reset state and its placement in IO;
- the operand refresh in EXR;
- the 2-cycle load-use cost in this 8-stage form;
- the program-load port;
- all reset behaviour.

**Not reproduced:**
- About half of the timing refinements used to reach 100 MHz. Not reproduced: pre-registering the BR and WB forwarding data, restructuring the encoded multiplexers, computing CSR validity and hazard signals a stage early, and moving the W-form sign extension into BR. They change timing, not behaviour. Reproduced: one-hot forwarding, dropping the retire and CSR forwarding sources, pre-registering MEM's forwarding data, the MMIO address compare in BR, and exception detection and JALR resolution in BR.
- The PLL: the clock is an input.
- The dashed debug interface.
- Interrupts: none are described.

No FPGA timing closure has been done on this RTL, so its maximum frequency is unknown.

## Fitting the benchmarks

The two benchmarks fit comfortably. These sizes are typical for bare-metal RV64 builds, not measured ones:

- **Dhrystone 2.1:** about 10–25 KiB of code, and about 11 KiB of data (its largest array is 50 x 50 ints).
- **CoreMark:** about 15–30 KiB of code, and a 2000-byte working set plus stack.

Both read the cycle counter for timing and write their results to the UART address. Running the complete benchmarks needs a RISC-V C compiler, so only the CoreMark CRC kernel and the Dhrystone loop operations above have been simulated.
