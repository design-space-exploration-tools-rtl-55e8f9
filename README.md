# ByoRISC: a RISC core whose custom instructions read and write many registers at once

ByoRISC ("build your own RISC") is a 32-bit, in-order, load-store processor meant to be
extended with application-specific *custom instructions* (CIs). An ordinary RISC format
has room for two source registers and one destination. That limit throws away most of
the benefit of a custom instruction, because the profitable pieces of a data-flow graph
usually need several inputs and produce several outputs. ByoRISC removes the limit
three ways:

* **A CI word holds no register fields.** It holds an opcode and a 24-bit
  *occurrence number* (`ciocc`). An extra pipeline stage, **SID** (secondary
  instruction decoding), uses that number to look up a table entry that lists up to 8
  source and 8 destination registers for that one static occurrence of the CI in the
  program.
* **The register file has 8 read and 8 write ports** (256 registers). It is built from
  many small synchronous memories, not one big multi-ported array.
* **The forwarding network scales with the port count.** Every read port can take its
  operand from any write lane of any later pipeline stage.

This repository holds a SystemVerilog model of the main configuration described in
*"Design space exploration tools for the ByoRISC configurable processor family"*
(Kavvadias and Nikolaidis). It covers the six-stage pipeline, the SID table, the
replicated multi-port register file, the bypass network and a CI unit with two example
CIs. The last section lists what differs from that description.

---

## Configuration

All sizes are parameters of `byorisc_top`; the defaults are the evaluated configuration.

| Parameter | Default | Meaning |
|---|---|---|
| `NREGS` | 256 | architectural registers (32-bit), 16 to 256; register fields stay 8 bits wide, so programs must name registers below `NREGS` |
| `NRPORTS` | 8 | register-file read ports = CI inputs |
| `NWPORTS` | 8 | register-file write ports = CI outputs |
| `SID_ENTRIES` | 256 | CI occurrences the SID table can describe |
| `IMEM_WORDS` | 2048 | instruction memory (8 KB) |
| `DMEM_BYTES` | 8192 | data memory (8 KB) |
| `HAVE_CI` | 1 | 0 removes the SID stage: 5-stage pipeline, no CIs |
| `FORWARDING` | 1 | 0 disables all bypassing: operands come from the register file only |
| `BR_EARLY` | 1 | 1: branches redirect the PC from EX; 0: from the EX/MEM register, one cycle later |
| `MULT_TPL` | 1 | 1: 4-cycle pipelined multiplier; 0: single-cycle (combinational) multiplier |
| `SHIFTER_TPL` | `SHF_FUNNEL` | shifter built as a funnel, a logarithmic barrel (`SHF_BARREL`) or three dedicated shifters (`SHF_DEDICATED`); same function |
| `OPT_LS` | 1 | 0 leaves out `LB LBU LH LHU SB SH` |
| `OPT_SHIFT` | 1 | 0 leaves out the shift-by-immediate instructions `SLL SRL SRA` |
| `OPT_MUL` | 1 | 0 leaves out `MUL MULU` and the multiplier |
| `OPT_LOGIC` | 1 | 0 leaves out `NOR` |
| `OPT_SET` | 0 | 1 adds `SEQ`, `SNE`, `SLE` and `SLEU` (signed and unsigned less-or-equal); off by default, as in the evaluated core |

With every `OPT_*` switch at 0 the core keeps only the 22 instructions that any ByoRISC
must execute in hardware:

* `ADD ADDU SUB SUBU AND OR XOR`
* `LW SW LLI LHI LOLI`
* `SRAV SRLV SLLV SLT SLTU`
* `J JR BNEZ BEQZ HALT`

An opcode from a group that is switched off executes as a `NOP`. The group membership
is this model's reading of the published option names.

Two rules apply to the port counts:

* `NREGS / NWPORTS` must be a whole number.
* A SID entry is `(NRPORTS + NWPORTS) * (log2 NREGS + 1)` bits wide: 144 bits by default.

Shared widths and the opcode map live in `rtl/byorisc_pkg.sv`.

---

## Pipeline

```
 IF ──► SID ──► ID ──► EX ──► MEM ──► WB
 PC     CI?     decode  ALU    load     write up to
 IMEM   SID     RF addr shift  data     NWPORTS
 read   table   J/JAL   MUL    align    results
        read    redirect CI
                        BEQZ/BNEZ/JR, HALT
                        forwarding muxes
```

Every storage block reads synchronously: IMEM, DMEM, SID table and register file. A
read therefore always straddles a stage boundary. The address is presented in one
stage, and the data are used in the next.

| Stage | Address presented | Data used |
|---|---|---|
| IF → SID | PC to IMEM | instruction word in SID |
| SID → ID | `ciocc` to the SID table | register lists in ID |
| ID → EX | register addresses to the register file | operand values in EX |
| EX → MEM | load/store address to DMEM | load data in MEM |

With `HAVE_CI = 0` the fetched word goes straight to ID and the SID stage disappears.

The PC counts 32-bit words. The core starts at word 0 after reset and runs until it
executes `HALT`. At that point `halted` rises and the pipeline freezes.

---

## SID: where a custom instruction finds its registers

The two most significant opcode bits say whether a word is a base instruction or a CI:

* `00` marks one of 64 base opcodes.
* Anything else marks one of 192 CI opcodes.

In the SID stage the low 8 bits of `ciocc` address the table. The entry reaches ID
together with the instruction. For a CI, the decoder takes its read and write address
vectors from the entry instead of from the instruction word.

Entry layout, most significant field first (each address is `log2 NREGS` = 8 bits):

```
 dst0 | dst1 | ... | dst7 | we_v[7:0] | src0 | src1 | ... | src7 | re_v[7:0]
 [143:136]                  [79:72]                         [7:0]
```

* Bit *k* of `re_v` enables read port *k*. That port reads register `src`*k*, and its
  value becomes CI input *k*.
* Bit *k* of `we_v` enables write lane *k*. CI output *k* is written to `dst`*k*.

The same opcode can appear many times in a program, each time with its own entry and
so its own registers. The compiler (or the person hand-writing code) owns the
numbering of occurrences. Software loads the table through `sid_we/sid_waddr/sid_wdata`
while the core is held in reset. `tb/byorisc_asm_pkg.sv` has a `sid_entry()` helper
that packs an entry.

---

## Multi-port register file (`byorisc_mprf`)

Eight simultaneous writes and eight simultaneous reads do not map onto FPGA block RAMs,
which have one write port each. The register file is therefore assembled from
1-write/1-read blocks:

* The 256 registers are split by address into `NWPORTS` **banks** of 32 registers each
  (bank *b* holds r32*b* … r32*b*+31).
* Every bank is **copied once per read port**. That makes 8 × 8 = 64 small memories,
  and every copy of a bank receives the same writes.
* Read port *p* reads copy *p* of all banks. A multiplexer driven by the upper address
  bits (registered with the address) picks the bank.
* A write is **steered by its address**, not by its lane number. Whatever lane carries a
  result for r70, it lands in bank 2.

Programming rule:

* One instruction (or two instructions retiring in the same cycle, which cannot happen
  here) must never write two registers of the same bank.
* The CI destination registers in a SID entry must therefore come from different banks.
* A simulation assertion fires when the rule is broken. The hardware would keep the
  write from the lowest lane only.

Each bank memory is **write-first**. A register that is written back in the same cycle
as it is read returns the new value. The bypass network relies on this (see below).

Cost: read and write latency are one cycle each, and storage is `NRPORTS` times the
architectural size (8 × 256 × 32 bits).

---

## Scalable register bypassing (`byorisc_fwd_unit`, `byorisc_fwd_mux`)

There are **no interlocks** anywhere in the pipeline. Data hazards are resolved only by
forwarding. When an instruction is in EX, its results can be in two places that the
register file does not yet reflect:

| Where the newer value is | Stage index (`pipe_sel`) |
|---|---|
| the register file (the value read in ID) | 0 |
| EX/MEM register (result of the previous instruction) | 1 |
| MEM/WB register (result of the one before that) | 2 |

Each later stage carries a whole result vector: `NWPORTS` lanes, each with its
destination address and write enable.

**Comparators.** For every read port the forwarding unit compares the port's address
with every lane's destination in both stages: 8 × 2 × 8 = 128 comparators.

**Done gating.** Each comparator hit is ANDed with the lane's write enable and with a
*done* flag for its stage.

**Selection.** Per read port it outputs:

* `pipe_sel` (0/1/2), which stage to take the value from;
* `wp_sel` (0…7), which lane of that stage.

Then `NRPORTS` multiplexers of 17 inputs each (register file + 2 × 8 lanes) produce the
EX operands.

**Priority.** The younger stage (EX/MEM) beats MEM/WB. Within a stage the lowest lane
wins. A well-formed program never has two lanes of one instruction writing the same
register.

Three cases need care:

* **Results in write-back.** An instruction three slots older is writing back while its
  reader is in ID, so it is in neither pipeline register. The write-first banks hand the
  reader the new value directly. That is why the multiplexer needs no third stage input.
* **Loads.** A load in MEM still has no data in the EX/MEM register. Its stage reports
  *not done*, so a reader in EX does not take the stale value from there. The loaded
  value can be forwarded one cycle later from MEM/WB.
* **The load delay slot.** Since nothing interlocks, the instruction immediately after a
  load must not use the loaded register. The one after that gets it by forwarding. The
  testbenches place an independent instruction or a `NOP` in the slot.

With `FORWARDING = 0` every `pipe_sel` is 0. The program must then keep three
independent instructions (two in a core without SID) between producer and consumer.

---

## Stalls and squashed instructions

**Multi-cycle operations stall the front of the pipeline.** Two operations take more
than one cycle in EX:

* `MUL/MULU` run in a 4-cycle pipelined multiplier (a single-cycle one with
  `MULT_TPL = 0`).
* A CI may need several cycles. `fsdither1` takes 2.

While EX holds an unfinished operation, `stall` is high. `stall` acts as a clock enable
for everything from the PC to the ID/EX register, including the memories' read
registers. Meanwhile EX/MEM receives bubbles, so older instructions drain and keep
forwarding correctly. The cycle the operation reports *done* its results move on like
any other.

**Taken control transfers squash the wrong path.** There are no delay slots. Fetched
instructions after a taken transfer are turned into bubbles:

| Transfer | Decided in | Squashed, default core | `BR_EARLY = 0` | `HAVE_CI = 0` |
|---|---|---|---|---|
| `J`, `JAL` | ID | 2 | 2 | 1 |
| `BEQZ`, `BNEZ`, `JR` | EX | 3 | 4 (resolved from EX/MEM, kills EX too) | 2 |

A loop iteration with a taken back-branch therefore pays 3 cycles in the default core.
`tb_byorisc_core` measures these differences directly on three differently
configured cores running the same program.

---

## Instruction set and encoding

Every field sits on a byte boundary. The opcode is always bits [31:24].

```
 R-fmt  opcode | rt  | rd  | rs        rd = rs op rt
 S-fmt  opcode | rt  | rd  | shamt     rd = rt shifted by shamt[4:0]
 I-fmt  opcode | rt  |   imm16         immediates, BEQZ/BNEZ
 J-fmt  opcode |      addr24           J, JAL (absolute word address)
 B-fmt  opcode |      ciocc24          custom instructions
```

| Group | Instructions | Notes |
|---|---|---|
| arithmetic | `ADD ADDU SUB SUBU` | no overflow trap, so signed and unsigned give the same word |
| logical | `AND OR XOR NOR` | |
| compare | `SLT SLTU`; with `OPT_SET` also `SEQ SNE SLE SLEU` | rd = 1 or 0 |
| shifts | `SLL SRL SRA` (S-fmt), `SLLV SRLV SRAV` (amount in rs) | a 64-bit funnel shifter by default; `SHIFTER_TPL` selects a barrel or dedicated shifters |
| multiply | `MUL MULU` | low 32 bits of the product; 4 cycles, or 1 with `MULT_TPL` = 0 |
| immediates | `LLI` rt = imm, `LHI` rt = imm << 16, `LOLI` rt = rt \| imm | a 32-bit constant takes `LHI` + `LOLI` |
| loads | `LW LH LHU LB LBU` | rd = MEM[rs]; byte addresses; little-endian byte lanes |
| stores | `SW SH SB` | MEM[rs] = rt |
| control | `J JAL JR BEQZ BNEZ` | `JAL` writes pc+1 to r31; branch target = pc + 1 + imm16 (words) |
| other | `NOP HALT` | |
| CIs | opcodes `0x40`–`0xFF` | operands from the SID table |

Addressing is register-direct: there is no base+offset mode, so pointer arithmetic is
explicit. The numeric opcode values (`opcode_e` in the package) are this model's own;
`tb/byorisc_asm_pkg.sv` provides encoder functions for all formats.

---

## The custom instruction unit (`byorisc_ci_unit`)

The unit sits in EX. It receives all forwarded read-port values as inputs and returns
a full result vector plus a *done* flag. Two CIs are built in:

**`0x40` — permutation** (single cycle). Output *k* is input 7−*k*. It serves as a
reference 8-input/8-output CI for timing and for exercising all ports and lanes.

**`0x41` — `fsdither1`**, the inner step of a Floyd–Steinberg dithering kernel, which
copies one pixel.

* Inputs are *source* base, *destination* base and index *i*.
* It performs `MEM[dest + i] = MEM[source + i]` (one byte).
* It returns *i* + 1 on output 0 and the constant 4096 on output 1.

It is a small two-state machine:

* **LOAD** (cycle 1): the unit requests the byte read and EX stalls.
* **STORE** (cycle 2): the byte has arrived from the synchronous memory. It is written
  back, the outputs are valid and *done* rises.

The CI shares the single data-memory port with ordinary loads and stores. This costs
nothing in practice, because only the instruction in EX can issue an access. A loop
around it (`fsdither1; SLT t, i, 4096; BNEZ t, loop`) runs at 7 cycles per pixel:
2 (CI) + 1 + 1 + 3 squashed.

Any other CI opcode completes at once with all-zero results. Adding an extension means:

1. Add a branch on its opcode in `byorisc_ci_unit`.
2. Drive `out`, `done` and, if needed, the memory request.
3. Give each use of it in a program a SID entry.

---

## System wrapper and host interface (`byorisc_top`)

`byorisc_top` holds the core (with IMEM, SID table and register file inside) plus an
8 KB dual-port data memory. The core uses port A; port B belongs to a host.

Typical use:

1. Hold `rst` high.
2. Write the program with `imem_we/imem_waddr/imem_wdata`, one word per cycle.
3. Write SID entries with `sid_we/sid_waddr/sid_wdata`.
4. Write data with `host_en/host_we/host_addr/host_wdata` (word addresses).
5. Release `rst` and wait for `halted`.
6. Read the results back with `host_en/host_addr`. `host_rdata` is valid one cycle
   later.

`pc` shows the fetch address.

---

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it establishes |
|---|---|
| `tb_byorisc_top` | Default configuration, end to end: one program covering every instruction group, both CIs, a stall, all forwarding paths, write-first reads, taken/not-taken branches, J/JAL/JR and 8-lane multi-register writes. It checks 56 results in data memory and counts each mechanism (all must occur). |
| `tb_byorisc_core` | Six cores side by side: default, `BR_EARLY = 0`, `HAVE_CI = 0` with `FORWARDING = 0`, `MULT_TPL = 0` with a barrel shifter, 3 read/2 write ports, and 2 read/1 write ports. Checks the results, and the exact cycle differences that the squash table and the multiplier stall predict. |
| `tb_byorisc_fsdither_loop` | The dithering copy loop over 4096 pixels (the whole 8 KB data memory). Checks every destination byte and the cycle count, 7 × 4096 − 3 + 8 = 28 677. |
| `tb_byorisc_xtea` | XTEA encryption of 16 blocks (32 rounds each) in base instructions. Checks the ciphertext against a reference model and the cycle count (27 instructions + 3 squashed slots per round). |
| `tb_byorisc_htpack` | Halftone packing of a 512-pixel bilevel image, eight pixels to a byte, and unpacking it again, in base instructions. Checks every packed byte against a model, the round trip against the original image, and the cycle count. |
| `tb_byorisc_mprf` | Random 8-read/8-write traffic against a reference array, including write-first hits. |
| `tb_byorisc_fwd_unit`, `tb_byorisc_fwd_mux` | Priority and done gating against an independent model; every select combination. |
| `tb_byorisc_sid` | Entry packing, field order and CI detection. |
| `tb_byorisc_ci_unit`, `tb_byorisc_lsu`, `tb_byorisc_mult`, `tb_byorisc_alu`, `tb_byorisc_shifter`, `tb_byorisc_branch_unit`, `tb_byorisc_pc_unit`, `tb_byorisc_decoder`, `tb_byorisc_imem`, `tb_byorisc_dmem` | Unit checks against reference computations, including latencies. |

Simulating with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/byorisc_pkg.sv tb/byorisc_asm_pkg.sv tb/tb_byorisc_top.sv \
    --top-module tb_byorisc_top
./obj_dir/Vtb_byorisc_top
```

Replace the testbench file and top module name for any other test. Unit testbenches
that do not use the assembler package can drop `tb/byorisc_asm_pkg.sv`. Verilator's
two-state simulation starts registers at random values. All state that is read is
therefore reset or written first.

---

## How this model relates to the published design

**Follows the publication:**

* the six-stage pipeline, where J/JAL are decided early and branches late;
* the SID table entry format and size, indexed by `ciocc`;
* CI detection from the opcode MSBs;
* the replicated-bank register file;
* the bypass organisation: the comparator count, the done gating, `pipe_sel`/`wp_sel`
  and one multiplexer per read port;
* the stall-on-multicycle policy and the 4-cycle multiplier;
* one data memory transfer per cycle;
* 8 KB memories, 256 registers and 8/8 ports;
* the `HAVE_CI`, `FORWARDING`, `BR_EARLY`, `MULT_TPL` and `SHIFTER_TPL` options;
* the `OPT_LS`, `OPT_SHIFT`, `OPT_MUL`, `OPT_LOGIC` and `OPT_SET` switches for optional
  instruction groups;
* the instruction set of the evaluated core, which has no divide, no type conversion and
  the extra compare instructions switched off.

**Chosen here (not specified):**

* the opcode numbers and the assignment of registers to ports;
* squashing rather than delay slots, and the resulting one load delay slot;
* the word-counting PC and JAL linking to r31;
* the bank-write rule and write-first banks;
* forwarding priority;
* the bit order inside `we_v`/`re_v`;
* which instructions belong to each `OPT_*` group;
* the host load ports;
* little-endian byte lanes.

**Different from the publication:**

* `fsdither1` takes 2 cycles; the published figure is 1. A load followed by a dependent
  store cannot finish in one cycle with a synchronous-read memory.
* The remaining CIs of the evaluated image-processing kernels are not built. They are
  `fsdither0`, `hilcurv0`, `htpack0`, `htunpack0`, `xteaenc0` and `xteadec0`. Only their
  input/output counts are published, not what they compute.

**Not included:**

* the zero-overhead loop controller;
* the coprocessor interface;
* the interrupt controller;
* the AMBA bus bridge;
* the divider;
* `SYSCAL`/`BREAK`;
* the remaining optional groups: the divider and type conversion (`OPT_DIV`, `OPT_CVT`),
  and `OPT_CTI`, whose instructions are not listed;
* 8-bit immediate arithmetic (`HAVE_SMALL_IMM`), whose instructions are not listed;
* multi-cycle operations in the MEM stage, and deeper execution pipelines. Here MEM
  always takes one cycle, and a CI does all its work, including memory accesses, while
  it holds EX. It issues each memory access from EX and gets read data one cycle later,
  while still in EX.

The publication describes the first four only by name, or leaves them outside the
evaluated core. The divider is omitted from the evaluated configuration itself.
