# phoeniX-style approximate RV32IM core

Many workloads, such as image filtering, signal processing and machine learning, give acceptable
results when some arithmetic is wrong by a small amount. This core lets software make that trade
at run time. It is a small in-order RISC-V core (RV32I or RV32E, with the M extension). Its adder,
multiplier and divider each sit in a *circuit slot* array, next to an exact circuit. Three
CSRs pick the circuit for each unit and its error level: `alucsr`, `mulcsr` and `divcsr`. A
program turns approximation on, off or up and down with ordinary `csrrw` instructions between
code regions. It needs no special instructions or compiler support.

The second idea is that the pipeline does not care which circuit is used. It has no central
control unit. Every execution unit decodes its own control from `opcode`, `funct3` and `funct7`.
A unit that needs several cycles raises `busy`, and the pipeline waits for it. So a circuit with
a different latency can be placed in a slot without touching the hazard or forwarding logic.

The RTL follows a published architecture description (phoeniX). That description fixes the
structure, the CSR layout, the error-control codes and the divider algorithm. It does not give
the internals of the approximate adder and multiplier cells. Those are this design's own
choices, marked as such below and in the source headers.

## Execution-unit CSRs

All three CSRs have the same layout:

| bits    | field            | use in this RTL                                          |
|---------|------------------|----------------------------------------------------------|
| [31:16] | error control    | low 8 bits go to the selected circuit; [31:24] unused    |
| [15:12] | custom field II  | stored, not used by the default circuits                 |
| [11:8]  | custom field I   | stored, not used by the default circuits                 |
| [7:3]   | truncation ctrl  | stored, not used by the default circuits                 |
| [2:1]   | circuit select   | 00 accurate, 01 default approximate, 10/11 reserved      |
| [0]     | enable approx.   | 0 forces the accurate circuit                            |

| CSR      | address | controls                                |
|----------|---------|-----------------------------------------|
| `alucsr` | 0x800   | ADD/SUB/ADDI in the ALU                 |
| `mulcsr` | 0x801   | MUL, MULH, MULHSU, MULHU                |
| `divcsr` | 0x802   | DIV, DIVU, REM, REMU                    |

A unit uses its approximate circuit only when `enable = 1` and `select = 01`
(`phoenix_pkg::approx_active`). The reserved selects 10 and 11 hold no circuit and fall back
to the accurate one. A *circuit ON/OFF decoder* in each unit gives operands and the start pulse
only to the chosen slot, so the idle circuit does not switch. An output multiplexer then takes
the chosen slot's result. All CSRs reset to 0, which means fully accurate. Unknown CSR
addresses read as 0 and ignore writes. `csrrs` and `csrrc` with `rs1 = x0`, and their
immediate forms with `zimm = 0`, do not write.

Example: a factorial loop with an approximate multiplier at error level 6.

```
li    t0, 0x007E0003      # error code 0x7E, select 01, enable
csrrw zero, 0x801, t0     # mulcsr
...   mul a0, a0, a1 ...
csrrw zero, 0x801, zero   # back to exact
```

## Default approximate circuits

### Adder/subtractor (`approx_csa32`, `approx_rca4`)

This is a 32-bit carry-select adder built from eight 4-bit ripple-carry blocks. An approximate
block outputs `a | b` as its sum and `a[3] & b[3]` as its carry, and ignores its carry-in.
Only the four low blocks (bits 15:0) can be approximate. Block *k* is exact when
`err[k] = 1`, so `err = 0x0F` gives exact addition. Subtraction is `a + ~b + 1` through the
same adder. SLT, shifts and logic operations are always exact. Operands are held at zero when
the instruction is not an add or subtract, which saves switching (operand isolation).

### Multiplier (`approx_mul8`, `mul16_iter`, `mul32_hier`, `multiplier_unit`)

- **8x8 cell (`approx_mul8`).** The partial-product bits `a[j]&b[i]` fall into columns
  `c = i + j`. An exact column is added with full carry propagation. An approximate column
  keeps only the OR of its bits and produces no carry.
- **Column rules.** Columns 0 and 1 are always approximate. Column *c* from 2 to 7 is exact when
  `err[c-1] = 1`. Columns 8 and up are always exact.
- **Error levels.** The codes 0x00, 0x40, 0x60, 0x70, 0x78, 0x7C and 0x7E are error levels 0
  to 6. Each higher level makes one more column exact, from column 7 downwards.
- **16x16 (`mul16_iter`).** One 8x8 cell is reused over four cycles for the byte products
  AL·BL, AL·BH, AH·BL and AH·BH. Each product is shifted by 0, 8, 8 or 16 and added into the
  result.
- **32x32 (`mul32_hier`).** Four `mul16_iter` instances work in parallel on the 16-bit halves,
  so a 32x32 product takes 4 cycles.
- **Signed operations.** Signed operands are multiplied as magnitudes, and the product is
  negated when the signs differ. `MUL` is treated as signed x signed. Its exact low word is the
  same either way. Under approximation, a small negative factor such as a −1 filter tap then
  stays small instead of becoming 2³²−1.

The 8x8 cell's error metrics over all 65 536 operand pairs are measured by `tb_approx_mul8`:

- **ER** is the share of wrong products.
- **NMED** is the mean absolute error divided by 255².
- **MRED** is the mean of |error| / exact product.

| level | code | ER      | NMED     | MRED   |
|-------|------|---------|----------|--------|
| 0     | 0x00 | 79.96 % | 0.354 %  | 2.93 % |
| 1     | 0x40 | 71.15 % | 0.137 %  | 1.47 % |
| 2     | 0x60 | 59.89 % | 0.050 %  | 0.68 % |
| 3     | 0x70 | 46.39 % | 0.017 %  | 0.28 % |
| 4     | 0x78 | 31.64 % | 0.005 %  | 0.10 % |
| 5     | 0x7C | 17.19 % | 0.001 %  | 0.03 % |
| 6     | 0x7E | 6.25 %  | <0.001 % | 0.01 % |

These are not the original figures, since that cell's internals were not published. The
original reports ER falling from 65 % to 36 %, MRED from 8.9 % to 0.85 % and NMED from 1.25 % to
0.25 % over the same levels. This cell covers a wider ER range (80 % down to 6 %), and its NMED
and MRED are lower at every level. The codes, the level order and the hierarchy are the
original's. For example, 10! computed with `mulcsr = 0x007E0003` gives the exact 3 628 800 with
this cell, and 1 975 040 at level 0.

### Divider (`nr_divider`, `divider_unit`)

This is a non-restoring divider that produces one quotient bit per cycle, 32 cycles in all.
Signed operands are divided as magnitudes. The quotient is negated when the signs differ, and
the remainder takes the dividend's sign. Division by zero and `-2³¹ / -1` give the results the
RISC-V specification defines.

Under approximation, the last `min(err, 31)` iterations are skipped. The low quotient bits come
out as 0, and the remainder is corrected so that `dividend = q·d + r` still holds. The divide
also finishes `err` cycles sooner. The error-skipping scheme is this design's choice; only the
8-bit error range and "exact at level zero" are given.

## Pipeline

```
        FD                         EX                               MW
  PC -> I$ -> decode     ALU  (alucsr)                        load/store unit -> D$
        immediate        MUL  (mulcsr, multi-cycle)           write-back mux:
        reg-file read    DIV  (divcsr, multi-cycle)             next PC | imm | load | exec
        forwarding muxes address generator, branch unit, CSRs -> register file
```

- **FD (fetch + decode).** The PC addresses the instruction memory. The decoder only slices out
  fields. The immediate generator and the register file work in parallel. Forwarding
  multiplexers choose each operand from the EX result, the MW write data or the register file,
  with the younger (EX) value first (`hazard_forwarding_unit`).
- **EX.** All units see the operands. The *execution-stage multiplexer* takes the ALU,
  multiplier, divider or CSR result according to the instruction. Branches and jumps are
  resolved here (`jump_branch_unit`, `address_generator`).
- **MW (memory + write-back).** The load-store unit makes byte enables and aligned store data,
  and extends load data by sign or zero. The write-back mux picks the next PC (JAL/JALR), the
  immediate (LUI), load data or the execution result.

Timing (memories are single-cycle: combinational read, write on the clock edge):

| event                                  | cost                                                  |
|----------------------------------------|-------------------------------------------------------|
| ALU, CSR, store                        | 1 cycle, result forwarded from EX                     |
| load followed by a dependent instr.    | 1 stall cycle in FD, then forwarded from MW           |
| taken branch, JAL, JALR                | 1 bubble: predicted not taken, redirect from EX       |
| MUL/MULH/MULHSU/MULHU                  | 5 stall cycles (FD and EX held), 6 cycles in EX       |
| DIV/REM exact                          | 33 stall cycles; `err` fewer when approximate         |
| DIV/REM by zero                        | 1 stall cycle                                         |

The multiply or divide starts in its first EX cycle. The stage holds while
`!started || busy`, and a bubble goes into MW meanwhile. The unit latches its operands, funct3
and CSR value at the start, so a stall never changes an operation in progress. Because the
hold condition only looks at `busy`, a slot circuit of any latency works without changes
elsewhere.

Parameters of `phoenix_core`:

- `E_EXTENSION` (default 0): 1 gives RV32E, with 16 registers. x16 to x31 read as zero, and
  writes to them are dropped, including on the forwarding paths.
- `M_EXTENSION` (default 1): 0 removes the multiplier and divider. An M instruction then writes
  zero to `rd` in one cycle, because the core has no illegal-instruction trap.
- `RESET_ADDRESS` (default 0): the first fetch address.

The reset is asynchronous and active low. There are no interrupts, exceptions or privilege
modes. FENCE and ECALL/EBREAK run as no-ops.

## Module map

```
phoenix_core
├─ fetch_unit              PC, stall hold, redirect
├─ instruction_decoder     field extraction, register enables
├─ immediate_generator     I/S/B/U/J immediates
├─ register_file           32 (or 16) x 32, x0 = 0
├─ hazard_forwarding_unit  forwarding selects, load-use stall
├─ arithmetic_logic_unit   RV32I ALU ops; add/sub via approx_csa32 (approx_rca4)
├─ multiplier_unit         2 slots of mul32_hier (4 x mul16_iter (approx_mul8))
├─ divider_unit            2 slots of nr_divider
├─ address_generator       branch/jump targets, load/store addresses
├─ jump_branch_unit        branch condition
├─ control_status_unit     alucsr / mulcsr / divcsr and Zicsr instructions
└─ load_store_unit         byte enables, store alignment, load extension
```

Shared types live in `phoenix_pkg`: the opcodes, the `exec_csr_t` CSR struct, the write-back
and forwarding selects, and the decoded-instruction struct. The instruction and data memories
are not part of the core. Their signals are core ports, and the testbenches model them as
arrays.

## Simulation

Each module has a self-checking testbench, `tb/tb_<module>.sv`. Each ends with a line
`TB_RESULT checks=N failures=M`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/phoenix_pkg.sv tb/rv32_asm_pkg.sv tb/tb_phoenix_core.sv \
    --top-module tb_phoenix_core -o sim
./obj_dir/sim
```

- `tb_phoenix_core` runs the core at its default parameters on a short program built by an
  in-line assembler (`rv32_asm_pkg`). The program covers ALU operations, loads and stores,
  branches, CSRs, the multiplier at several error levels, 10! at level 6, and exact and
  approximate division.
  - It checks register and memory results.
  - It counts each pipeline mechanism and fails if one never happens: load-use stalls,
    multi-cycle waits, redirects, EX and MW forwarding, CSR writes, and approximate adds,
    multiplies and divides.
  - It checks the exact number of multi-cycle wait cycles.
- `tb_phoenix_workloads` runs small kernels on the core and checks every output word against a
  software model of the approximate circuits. It also prints cycles, CPI and PSNR:
  - 5x5 sharpening of a 64x64 image at every error level (1.6 million cycles per level);
  - 3x3 convolution;
  - bubble sort;
  - Fibonacci;
  - array maximum;
  - an 8-tap FIR.

  On the sharpening kernel, which uses an assumed kernel with a centre weight of 49 and −1
  elsewhere, PSNR against the exact image is:
  - infinite at levels 6 to 4;
  - 55.0 dB at level 3;
  - 43.9 dB at level 2;
  - 37.7 dB at level 1;
  - 31.9 dB at level 0.

  The original evaluation used a 512x512 image, the kernel of an earlier sharpening study and its
  own multiplier cell. It reports 46.3 dB at level 6 falling to 21.8 dB at level 0, so only the
  trend is comparable.
- `tb_phoenix_core_configs` runs the same program on an RV32E core with M and on an RV32I core
  without M. It checks the register behaviour and the stall cycles of each.
- The unit testbenches compare against independent models:
  - `tb_approx_mul8` checks every operand pair at every level;
  - the adder, multiplier and divider testbenches use random operands plus corner cases;
  - the pipeline-unit testbenches work from the RISC-V definitions.

## Where this RTL departs from the source architecture

- **Approximate cell internals.** The OR-based adder blocks, the column-OR multiplier cell and
  iteration skipping in the divider are this design's own. The error-rate, area, power and
  PSNR numbers of the original therefore do not carry over. With this cell, the factorial
  example gives the exact result at level 6, where the original reports 3 587 840.
- **Adder error field.** The original describes an 8-bit adder error field with 64
  configurations, but also says the adder is exact at code 0x0F. Those two statements cannot
  both hold. This RTL follows the 0x0F statement: 4 controllable blocks, 16 configurations.
- **CSR field order.** The prose and the register drawing disagree on where the truncation and
  custom fields sit. The drawing's order is used (table above). No default circuit reads those
  fields.
- **Reserved slots.** They are empty, and selecting them gives the accurate circuit. The
  comparison multipliers from other works are not included.
- **Latencies and memory.** The multiply and divide latencies, the single-cycle memory
  interface and the stall/forwarding details are choices made here. Dhrystone was not run, so
  the reported CPI of 1.13 is not confirmed. The small kernels above run at a CPI of 1.1 to 1.9.
