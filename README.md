# An in-memory computing engine for garbled circuits and homomorphic encryption

Privacy-preserving computation uses two very different kinds of arithmetic.

- **Homomorphic encryption (HE)** computes on ciphertexts that are polynomials of degree N. Every HE operation turns into the same integer operation on thousands of independent coefficients.
- **Garbled circuits (GC)** turn a Boolean circuit into a graph of encrypted gates. Each wire carries a 128-bit label. A gate is either a FreeXOR (the XOR of two labels) or a Half-Gate AND, which needs fixed-key AES hashes of labels. The gates depend on each other in an irregular way.

This engine runs both kinds of work on one array of small compute-in-memory cores. Each core keeps its data in SRAM arrays that can compute on two rows at once. One scheduler in front of the cores handles the two cases:

- **HE mode:** the scheduler sends an HE instruction to every core at once. Coefficient *i* of a polynomial lives in core *i*.
- **GC mode:** the cores are grouped into *GC computing units*. Each unit takes one gate instruction at a time, and every core of the unit runs it on its own data. The scheduler tracks which gate outputs are still being computed and holds back gates whose inputs are not ready.

Default sizes:

| Item | Default |
|---|---|
| IMC cores | 6144 in the RTL (`N_CORES`); the original engine has 8192 |
| GC computing units | 16, of 384 cores each (512 at 8192 cores) |
| CEM memory per core | 4 KB, in four 1 KB arrays |
| Micro-instruction memory (μIM) per core | 16 KB |
| Output-address CAM | 16 KB |
| Instruction bank | 16 KB |

## Block overview

```
 host CPU ──C-Inst──► imc_is ──────────────────────────────► imc_core × N_CORES
 (not included)       ├ oa_cam      output addresses in flight    ├ core_controller
                      └ cinst_bank  instructions waiting          │   ├ decoder table
                                                                   │   └ micro_imem (1024 × 128 b)
 main memory ─host_*──────────────────────────────────────────────►└ imc_pe
 (not included)                                                        ├ cem_array × 4 (256 × 32 b)
                                                                       ├ shifter
                                                                       ├ lut_fabric (4 lanes × 3 tables of 256 × 8)
                                                                       └ memory / shifter / LUT output buffers, write driver
```

`ppimce_top` wires these together. `ppimce_pkg` holds the shared types: the C-Inst and micro-instruction structs, opcodes and function codes.

## C-Insts: what the host sends

A C-Inst is 64 bits (`cinst_t`):

| Bits | 63:60 | 59:48 | 47:32 | 31:16 | 15:0 |
|---|---|---|---|---|---|
| Field | op | imm | dst | src1 | src0 |

The addresses are core-local row numbers. Only the low 8 bits reach the CEM arrays. The 16-bit width is what the dependency CAM compares.

| op | name | kind | use |
|---|---|---|---|
| 1 | FREEXOR | GC | XOR of two labels |
| 2 | HALFGATE | GC | Half-Gate; here the fixed-key AES-128 hash of `src0` |
| 3..9 | PADD, PSUB, PMUL, PRED, PPERM, NTT, INTT | HE | polynomial operations, run as per-core micro-code |
| 10 | UIM_WR | setup | `dst[15]=0`: write 32 bits `{src1,src0}` into μIM word `dst[11:2]`, chunk `dst[1:0]`; `dst[15]=1`: decoder entry for opcode `dst[3:0]` = start `src0`, length `src1` |
| 11 | LUT_WR | setup | write byte `imm[7:0]` at index `src0[7:0]` of LUT table `src1[1:0]` |

Opcodes 1 and 2 are scheduled in GC mode. Every other opcode is broadcast to all cores, and that includes the setup C-Insts, so micro-code and tables are loaded into every core at once.

The GC and HE operations are not fixed in hardware. Each opcode is only an entry in a programmable decoder table that points at a micro-code sequence. The micro-code used by the testbenches is built in `tb/tb_util_pkg.sv`.

## Inside a core

### The micro-instruction

Each cycle a core executes one 128-bit micro-instruction (`uinst_t`). Its fields drive all units of the processing element in parallel:

| Field | Bits | Content |
|---|---|---|
| LUT | 2 | enable, mode |
| shifter | 6 | enable, class (2 bits), argument (3 bits) |
| CEM array *i*, for i = 0..3 | 4 × 30 | enable, function (3 bits), `ra`, `rb`, `rd` (8 bits each), write source (2 bits) |

The field widths of 2, 6 and 4 × 30 (1 + 3 + 26) bits match the original description of the engine. The split of the 26 address bits into three 8-bit rows and a 2-bit write source is this design's own choice.

Data moves through the processing element in fixed steps:

1. **CEM arrays.** Array *i* combines rows `ra` and `rb` (READ, AND, OR, XOR, NOT, ADD, ADD with carry-in 1, or read `rb`). The result goes into lane *i* of the **memory output buffer**. The same micro-instruction can write the result, the shifter buffer lane or the LUT buffer lane back to row `rd`.
2. **Shifter.** It reads the memory output buffer and fills the **shifter output buffer**. It can do:
   - AES ShiftRows or InvShiftRows;
   - per-lane shift left, shift right or rotate left by 2^arg bits;
   - extend each lane's MSB over the lane, to make a select mask;
   - extend the LSB of the whole line, to make the permute bit of a label.
3. **LUT fabric.** It reads the shifter output buffer and fills the **LUT output buffer**. There are two modes:
   - **T-table mode:** the output is SubBytes followed by MixColumns. Each output byte is `T1[x_r] ^ T2[x_{r+1}] ^ T0[x_{r+2}] ^ T0[x_{r+3}]` within a 32-bit column, with T0 = S-box, T1 = 2·S and T2 = 3·S.
   - **Plain lookup mode:** each byte becomes `T0[x]`. This serves the last AES round, or 4-bit × 4-bit products when T0 holds a multiplication table.

A value therefore takes one micro-instruction per stage on its way from the arrays through the shifter and the LUT. The micro-code schedules these steps statically; there are no interlocks inside a core.

### Operand substitution

In a micro-instruction, the row codes 0xFD, 0xFE and 0xFF stand for the C-Inst's `src0`, `src1` and `dst`. The core controller replaces them before the micro-instruction reaches the arrays. So one micro-code sequence serves any operand rows. Every core of a unit applies the same rows to its own local data.

### Timing of one C-Inst

For a micro-code sequence of length L:

| Cycle | Event |
|---|---|
| t | C-Inst accepted |
| t+1 | decode; first μIM read |
| t+2 .. t+L+1 | micro-instructions execute |
| t+L+2 | `done` pulses and the core is free again |

So a core is busy for L+2 cycles:

- FreeXOR is one XOR micro-instruction and takes 3 cycles.
- The AES-128 hash micro-code is 41 micro-instructions and takes 43 cycles:
  - one XOR with round key 0;
  - then, for each of the 10 rounds: ShiftRows, LUT, write-back, and XOR with the round key.

  The round keys sit in rows 200..210 and row 199 is scratch.

## The scheduler (`imc_is`)

### GC mode

The scheduler keeps two tables:

- **OA-CAM** (`oa_cam`): holds the output address of every GC instruction that is running or waiting. An arriving instruction searches both of its input addresses in one cycle. A hit means it depends on an unfinished instruction.
- **C-Inst Bank** (`cinst_bank`): holds instructions that cannot issue yet, because of a dependency or because no unit is free.

The bank is woken by tags, not by searching again:

- When an instruction enters the bank, it records the OA-CAM entries of the producers it waits for.
- When a unit finishes, its OA-CAM entry is freed. The scheduler broadcasts the freed entries as a bit mask, and bank entries waiting for them become ready in the same cycle.
- This gives the same result as searching the CAM again every cycle, provided wire addresses are assigned only once. That holds for a compiled garbled circuit.

The scheduler issues at most one instruction per cycle, to the lowest-numbered free unit. A ready bank entry goes first, and the arriving instruction goes only if the bank has nothing ready. A unit that reports `done` in a cycle can already take a new instruction in that cycle. With these rules the scheduler reproduces the published two-unit example exactly. `tb_imc_is` checks every issue cycle of that example:

- a 3-cycle FreeXOR Ia and a 44-cycle Half-Gate Ib issue in cycles 1 and 2;
- dependent Ic issues in cycle 4, when Ia finishes;
- Id issues in cycle 46;
- Ie issues in cycle 48.

The original text gives 45 cycles for a Half-Gate, but its figure implies 44. The scheduler does not depend on either number, because it waits for `done`.

The host sees back-pressure on `in_ready` when the CAM or the bank is full.

### HE mode and the mode switch

A non-GC instruction is sent to all units at once, with no CAM or bank check. It goes only when every unit is free and the bank is empty. So GC work always drains before HE work starts. A GC instruction that arrives during HE work goes into the bank.

### Counters

`cnt_*` counts, since reset:

- instructions issued directly on arrival;
- instructions written into the bank;
- instructions issued from the bank;
- arrivals that hit a dependency;
- arrivals that waited only for a unit;
- broadcasts.

## How far the RTL goes

| Part | State |
|---|---|
| CEM array, shifter, LUT fabric, processing element, μIM, core controller, core | complete; checked against FIPS-197 AES-128 vectors and software models |
| OA-CAM, C-Inst Bank, scheduler | complete; checked against the published example and random dependency graphs |
| top level | complete; sizes are parameters |
| host RISC-V processor | not included; `in_valid/in_cinst/in_ready` is where it connects |
| main-memory interface (HBM-class) | not included; the `host_*` row port stands in for it |
| data movement between cores (HE automorphism, NTT butterflies across coefficients) | no dedicated path; coefficients are moved through the `host_*` row port, one row per cycle |
| HE micro-code for multiplication (4-bit LUT products + Karatsuba), special-modulus reduction, NTT | the datapath has the primitives, but no micro-code for them is written here |
| full Half-Gate garbling (two hashes plus table XORs) | represented by its dominant part, the AES hash |

Departures and choices to keep in mind:

- **Word width.** It is 32 bits per array, so a 128-bit label is one row across the four arrays. The source gives only the array size.
- **Subtraction.** It is NOT followed by ADD with carry-in 1, as the source describes.
- **Reduction formula.** The source writes the reduction step as `Y = X << k`. The reduction by 2^k ± 1 it describes needs the high part of X, so it should be a right shift. The shifter offers both.
- **Instruction count.** The source speaks of "eight" function instructions but lists nine. All nine have opcodes here.
- **GC data placement.** Where a wire's label lives is up to the software that loads labels. The source does not say how a result computed in one unit reaches another unit.
- **Pipelining inside a core.** The core overlaps the μIM read with execution. It does not overlap successive C-Insts.

## Simulation

Each block has a self-checking testbench in `tb/`. It prints `TB_RESULT checks=N failures=M`. Shared reference code is in `tb/tb_util_pkg.sv`: a software AES-128, GF(2^8) arithmetic, and micro-instruction and C-Inst builders.

To build one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ppimce_pkg.sv tb/tb_util_pkg.sv \
    $(ls rtl/*.sv | grep -v pkg) tb/tb_imc_core.sv --top-module tb_imc_core
./obj_dir/Vtb_imc_core
```

| Testbench | What it shows |
|---|---|
| `tb_cem_array`, `tb_shifter`, `tb_lut_fabric`, `tb_micro_imem` | each function against a software model; ShiftRows and MixColumns against FIPS-197 |
| `tb_imc_pe` | FreeXOR, one full AES round, subtraction and the MSB select mask, through micro-instructions |
| `tb_core_controller` | decoding, operand substitution, the L+2 timing, LUT writes |
| `tb_imc_core` | the whole AES-128 of FIPS-197 Appendix B (ciphertext `3925841d…0b32`) from C-Insts alone, in 43 cycles; FreeXOR in 3 cycles |
| `tb_oa_cam`, `tb_cinst_bank` | random traffic against models |
| `tb_imc_is` | the two-unit example cycle by cycle, counters, broadcast, random gate graphs with a RAW-order checker |
| `tb_ppimce_top` | end to end, described below |

`tb_ppimce_top` runs the engine with 32 cores in 4 units, an 8-entry bank and a 16-entry CAM:

- it loads tables and micro-code by broadcast;
- it runs a random GC graph of FreeXOR and Half-Gate instructions;
- it switches to HE for additions and subtractions;
- it switches back to GC.

It compares every row of every core with a model that follows the issue decisions. It also checks that each scheduling mechanism occurred:

- direct issue, bank insertion, issue from the bank;
- dependency stall, unit stall;
- broadcast, GC back-pressure, mode-switch stall.

This is the largest size simulated end to end. No testbench runs the top at its default of 6144 cores. Verilator needs about 2.1 MB per core just to elaborate the design, so a full-size build is too large to simulate in reasonable time.

The default itself is below the original 8192 cores for the same reason. At 8192 cores, linting takes about 17 GB and a synthesis front end about 5 to 10 GB more. Running both at once does not fit comfortably in 32 GB. Set `N_CORES = 8192` for the original size; nothing else depends on it.
