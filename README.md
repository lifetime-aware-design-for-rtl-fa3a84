# FlexiBits: one RISC-V core, three datapath widths

Flexible integrated circuits run at tens of kilohertz and hold a few
thousand gates. In return they are thin, bendable and cheap enough to put
on a single item: a package, a food container, a patch on the skin. For
such "item-level" devices the right processor depends on how long the item
lives and how often its program runs.

- A short-lived tag that checks a threshold once an hour should use the
  smallest core. Its carbon and cost are dominated by manufacturing.
- A patch that classifies a signal every second for months should spend
  more area on a faster core. The energy it saves over its lifetime then
  outweighs the extra silicon.

FlexiBits answers this with a single core template whose datapath width
`W` is a parameter. Every 32-bit quantity moves through the core in `32/W`
*beats* of `W` bits, least significant beat first:

| `W` | class | cycles for one 32-bit operation | character |
|----|------|------|-----------|
| 1 | SERV-class, bit-serial (default) | 32 | smallest area, slowest |
| 4 | QERV-class, nibble-serial | 8 | middle |
| 8 | HERV-class, byte-serial | 4 | largest area, fastest |

The control logic does not depend on `W`. The decoder and the state
machine are the same for every width; only the beat counter gets shorter.
Everything that carries data is `W` bits wide. Changing one parameter
therefore moves along the area/speed curve, and the instruction set stays
the same.

This repository has synthesizable SystemVerilog for the core at any
`W` ∈ {1, 2, 4, 8, 16}. Around the core it has a small system-on-chip: a
program ROM, a data SRAM and GPIO on a simple bus. It also has
self-checking testbenches for every block, and a lockstep reference model
for the whole core.

## Instruction set

RV32E (16 registers) plus Zicsr, in machine mode only:

- All RV32E integer instructions except FENCE. FENCE decodes as a no-op.
- CSRRW/S/C and their immediate forms on four CSRs: `mscratch`, `mtvec`,
  `mepc` and `mcause`. All other CSR addresses read as zero.
- ECALL (mcause 11), EBREAK (mcause 3) and MRET. A trap saves the PC of the
  trapping instruction in `mepc` and jumps to `mtvec`.

There are no interrupts, no misalignment traps and no illegal-instruction
trap. Unknown opcodes execute as no-ops.

## How an instruction flows: stages and beats

`flexibits_state` steps every instruction through this sequence:

```
FETCH ──ack──► STAGE1 ──(one-stage)─────────────────────────────► FETCH
                  │
                  ├─(load/store)─► MEM ──dbus ack──► STAGE2 ──► FETCH
                  ├─(shift)──────► SHIFT ──done────► STAGE2 ──► FETCH
                  └─(branch/jump/SLT)──────────────► STAGE2 ──► FETCH
```

A *stage* is `32/W` clock cycles. In each cycle the register file gives
one `W`-bit beat of rs1 and of rs2, at address `{register, beat}`. The ALU,
the adders and the PC each take one beat per cycle. Between beats they
keep a carry or comparison bit in a flip-flop.

**One-stage instructions** are ALU register and immediate operations,
LUI, AUIPC and CSR accesses. They read their operands, compute, write rd
and advance the PC all in STAGE1.

**Two-stage instructions** are loads, stores, jumps, branches, shifts and
set-less-than. They need a result that is only known once all 32 bits have
been seen:

- an address, collected in buffer register #1;
- a comparison, which settles on the last beat;
- a whole operand for the shifter, collected in buffer register #2.

STAGE1 gathers these values. STAGE2 writes rd and the PC.

With a memory that acknowledges one cycle after a request, this gives the
following cycle counts. The count runs from the fetch request to
retirement, with `B = 32/W`:

| instruction | cycles | W=1 | W=4 | W=8 |
|---|---|---|---|---|
| one-stage (ADD, ADDI, LUI, CSR…) | 2 + B | 34 | 10 | 6 |
| branch, JAL, JALR, SLT(I/U) | 2 + 2B | 66 | 18 | 10 |
| load, store | 4 + 2B | 68 | 20 | 12 |
| shift by `s` | 3 + 2B + steps(s) | 67 + s | 19 + ⌊s/4⌋ + s mod 4 | 11 + ⌊s/8⌋ + s mod 8 |

At `W = 1` a load or store takes 68 cycles. The published figure for the
bit-serial core is about 64 cycles, or 70 counted from the fetch. The
testbenches check these numbers cycle by cycle.

### The shifter

Shifts are the one place where the datapath does more than pass beats
along. STAGE1 loads rs1 into buffer register #2, one beat at a time. It
also captures the shift amount from the low five bits of rs2 or of the
immediate. In the SHIFT phase the register moves by `W` bits per cycle
while at least `W` positions remain, then by one bit per cycle. STAGE2
streams the result out to rd. A wider core therefore also shifts faster.
The published work mentions shift optimisations for the wider cores but
gives no detail, so this step rule is this design's own.

## Blocks

The core (`flexibits_core`) is split into a control plane and a data plane.
Only the data plane depends on `W`.

| file | block | role |
|---|---|---|
| `flexibits_pkg.sv` | – | opcodes, control enums, decoded-instruction struct, bus structs |
| `flexibits_decoder.sv` | decoder | latches the instruction at fetch; produces one `dec_t` of control fields |
| `flexibits_state.sv` | state machine | FETCH/STAGE1/SHIFT/MEM/STAGE2, beat counter, bus cycles, `retire` |
| `flexibits_immdec.sv` | immediate decoder | assembles the I/S/B/U/J/CSR immediate at fetch; shifts it out `W` bits per beat |
| `flexibits_alu.sv` | ALU | add/sub, xor, or, and; registered `eq`/`lt` flags for branches and SLT |
| `flexibits_bufreg1.sv` | buffer register #1 | serial address adder (rs1/PC + imm); provides the data-bus address and the jump/branch target |
| `flexibits_bufreg2.sv` | buffer register #2 | store data, load data and the shifter |
| `flexibits_ctrl.sv` | control unit | rotating PC, serial PC+4, next-PC select, branch decision |
| `flexibits_csr.sv` | CSRs | mscratch, mtvec, mepc, mcause; trap entry and MRET |
| `flexibits_memif.sv` | memory interface | byte selects and store-data replication; load alignment and sign extension |
| `flexibits_rfif.sv` | register-file interface | port addresses, write-back select, x0 handling |
| `flexibits_rf_ram.sv` | register file | `16·32/W × W` memory, two asynchronous read ports and one write port |
| `flexibits_core.sv` | core | wires the blocks above together |
| `flexibits_lprom.sv` | LPROM | program and constant ROM with a programming port |
| `flexibits_sram.sv` | SRAM | data memory with byte writes |
| `flexibits_gpio.sv` | GPIO | output register and synchronised inputs |
| `flexibits_interconnect.sv` | bus | address decoding; the ROM is shared between fetch and data |
| `flexibits_soc.sv` | SoC (top) | core, bus, LPROM, SRAM and GPIO |

Each file opens with a comment giving the block's timing and interface. It
also says which parts follow the published design and which are choices
made here.

### Buses

Both core buses carry the structs `bus_req_t {adr, dat, sel, we, cyc}` and
`bus_rsp_t {rdt, ack}`.

- A request raises `cyc` and holds every field until `ack`. The slave
  raises `ack` for exactly one cycle.
- Every slave in the SoC answers one cycle after the request. This matches
  the "on-chip, single-cycle" memory assumed in the published cycle counts.
- Assertions in the core check that a request is held until `ack` and that
  `ack` never arrives without `cyc`.

The core never has both buses active at once, so the ROM port is simply
multiplexed between them.

### SoC address map

| `adr[31:30]` | region | base | default size |
|---|---|---|---|
| 0 | LPROM (code, constants) | `0x0000_0000` | 1024 words = 4 KiB |
| 1 | SRAM (data, stack) | `0x4000_0000` | 256 words = 1 KiB |
| 2 | GPIO: word 0 outputs, word 1 inputs | `0x8000_0000` | `NGPIO` = 8 pins |
| 3 | unmapped: acknowledged, reads zero | `0xC000_0000` | – |

The core starts at address 0 when `rst_n` is released. Load the program
through `prog_we/prog_addr/prog_data` while reset is held. This port
stands in for programming the ROM at manufacture.

## Sizes and what fits

Published memory profiles of the target workloads give a non-volatile
need (code and constants) and a volatile one (data). Against the default
4 KiB LPROM and 1 KiB SRAM:

| workload | NVM KB | VM KB | fits the defaults |
|---|---|---|---|
| Water quality monitoring | 0.31 | 0.01 | yes |
| Malodor classification | 0.74 | 0.02 | yes |
| Smart irrigation control | 1.92 | 0.08 | yes |
| Food spoilage detection | 2.66 | 0.10 | yes |
| Cardiotocography | 3.27 | 0.59 | yes |
| Arrhythmia detection | 3.47 | 4.17 | no, needs `RAM_WORDS` ≥ 2048 |
| Tree tracking | 3.45 | 39.19 | no, needs a 40 KB SRAM |
| Package tracking | 8.81 | 4.24 | no, both memories too small |
| HVAC control | 47.49 | 0.06 | no, needs `ROM_WORDS` ≥ 16384 |
| Air pollution monitoring | 63.38 | 0.09 | no, needs `ROM_WORDS` ≥ 16384 |
| Gesture recognition | 200.46 | 40.00 | no |

The memory sizes are parameters of `flexibits_soc` (`ROM_WORDS`,
`RAM_WORDS`). The published work does not say how large the fabricated
chip's memories were, so the defaults are chosen here: the smallest
powers of two that hold the five smallest workloads. The address map
leaves 1 GiB per region, so larger memories need only a new parameter
value.

## Verification

Every block has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.

- **`tb_flexibits_core`** runs the core at `W` = 1, 4 and 8. Each width
  runs a random program of 300 instructions in lockstep with an
  instruction-set model (`tb/rv_tb_pkg.sv`). At every retirement it
  compares all registers, the PC and the exact cycle count. At the end it
  compares the data memory.
  - The random programs cover every instruction class, all load and store
    sizes, and taken and not-taken branches.
  - They include JAL/JALR pairs, CSR traffic, and ECALL/EBREAK through a
    trap handler that returns with MRET.
- **`tb_flexibits_soc`** runs the SoC at its default parameters. It first
  runs a small water-quality monitoring program from the LPROM:
  1. it reads the number of samples from the GPIO inputs, and each sample
     (pH, dissolved oxygen, dissolved solids) from a constant table in the
     ROM;
  2. it checks each sample against fixed limits, writes a result byte to
     the GPIO outputs and logs it into SRAM, then sums the log;
  3. it touches the unmapped region;
  4. it finishes with an ECALL to a handler that writes a completion code
     to the GPIO outputs.

  A random program then runs in lockstep with the reference model. The
  testbench counts each bus path, trap kind and stage path it exercises,
  and fails if any of them never happened.
- **`tb_flexibits_workloads`** runs four sensor-classification kernels
  on three SoCs, with `W` = 1, 4 and 8. Each kernel classifies ten samples
  of 12-bit features. Each run checks its GPIO outputs and SRAM log.
  - The *decision tree* kernel walks a depth-3 tree. It stands for the
    threshold-like workloads, such as odour classification.
  - The *linear classifier* kernel forms a weighted sum of the features,
    then compares it with a threshold. This is how a logistic regression
    decides. RV32E has no multiplier, so it multiplies by shift and add,
    as the arithmetic-heavy workloads must.
  - The *nearest neighbour* kernel finds, for two features, the closest of
    eight labelled reference points by squared distance. It stands for
    the k-nearest-neighbours irrigation controller, and it also squares
    by shift and add.
  - The *perceptron* kernel grades a sample into one of three classes. It
    uses four centred inputs, three ReLU hidden units kept in SRAM, signed
    8-bit weights and an argmax. Every product goes through a
    multiply-accumulate subroutine, called with JAL and returning with
    JALR. It stands for the cardiotocography classifier.

  At each width the same instruction stream retires:

  | kernel | instructions | `W`=1 cycles | `W`=4 cycles (speed-up) | `W`=8 cycles (speed-up) |
  |---|---|---|---|---|
  | decision tree | 623 | 38 176 | 10 942 (3.48) | 6 893 (5.53) |
  | linear classifier | 2 460 | 141 971 | 40 349 (3.51) | 23 447 (6.05) |
  | nearest neighbour | 13 352 | 757 561 | 214 867 (3.52) | 124 453 (6.08) |
  | perceptron | 10 536 | 621 537 | 175 887 (3.53) | 101 647 (6.11) |

  The bit-serial core needs about 60 cycles per instruction. The spread
  of about 5–6× between the bit-serial and byte-serial cores matches the
  published runtime spread across the target workloads. It is below the
  8× ratio of beats per stage because every instruction pays the same
  fixed fetch cycles, whatever its width.
- The unit testbenches check each block on its own against a small model.
  Where a block has timing of its own, they also check cycle counts: the
  state machine's per-class instruction lengths, and the one-cycle
  acknowledge of the memories.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    --top-module tb_flexibits_core rtl/flexibits_pkg.sv tb/rv_tb_pkg.sv tb/tb_flexibits_core.sv
./obj_dir/Vtb_flexibits_core
```

Replace the top name to run another testbench. The testbenches read the
register-file memory hierarchically (`dut.u_rf.mem`), so keep that
instance name if you restructure the core.

## Departures and choices

The following follow the published design:

- the width-parameterised template;
- the control-plane/data-plane split;
- the block list: decoder, state machine, immediate decoder, two buffer
  registers, control unit, CSRs, ALU, memory and register-file interfaces;
- one-stage and two-stage instructions;
- the register file in a separate memory;
- RV32E;
- the bit-serial default of the fabricated SoC.

The following are this design's own:

- **Phase encoding and exact cycle counts.** These are close to the
  published "about 64 cycles" per bit-serial instruction, but not
  identical to them.
- **The shift speed-up for W > 1.** Its form is described under
  [The shifter](#the-shifter).
- **The CSR set.** This is the minimum needed to take and return from a
  trap. The published description names a CSR block but not its
  registers. Cores of this family usually also carry counters and a
  timer interrupt. Neither is modelled here.
- **The bus handshake, address map, memory sizes and GPIO block.** The
  published SoC's peripherals are not described.
- **No pad ring, clocking or test structures.** The top exposes plain
  ports.
- **No width-specific immediate decoding.** The published wider cores
  also decode I-type immediates more efficiently, but that is not
  described. Here the immediate decoder assembles the whole 32-bit
  immediate at fetch for every `W`. This costs area, not cycles.
- **No extension interface.** The template's support for adding
  extensions is not built.

Lint warnings that remain are explained in the opening comment of the
file concerned. Most of them are unused bits of a shared struct, such as
the write data seen by the ROM.
