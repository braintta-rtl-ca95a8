# BrainTTA: a transport-triggered, mixed-precision neural-network core

BrainTTA runs quantized neural-network layers (binary, ternary and 8-bit) on one
programmable core. Its core is not a fixed dataflow engine. It is a
*transport-triggered architecture* (TTA): the program does not say "add r1, r2".
Instead, every instruction lists *moves*, one per bus, and each move copies a
value from one unit's output register to another unit's input port. Writing a
unit's *trigger* port starts that unit's operation. The program controls every
data transfer, so a layer can be scheduled to keep values in registers and
avoid needless moves, and all of this stays in software.

Most of the work is done by three vector multiply-accumulate units: one each
for 8-bit, ternary and binary operands. They all take the same 1024-bit vectors.
The vectors come from two wide, banked memories, one for feature maps and one
for weights. A narrow access switches on only the banks it needs.

This repository holds synthesizable SystemVerilog for the TTA half of the
system-on-chip: the core, its memories, the host/core arbiter and the
debugger. It also holds self-checking testbenches for every block and an
end-to-end test that runs small mixed-precision layers on the full-size SoC.
It does not include:

- the RISC-V host processor;
- its bus fabric and peripherals;
- the DMA unit;
- the C compiler flow that the original design is programmed with.

Programs in the testbenches are written with a small assembler-style helper
package instead.

## 1. System view

```
             host bus (req/gnt, 32 bit)            irq
                    |                               ^
              +-----v------+   registers    +-------+----+
              |  arbiter   |--------------->|    dbg     |
              +--+---+---+-+                +--+------+--+
   core has      |   |   |                     | start| halt
   priority      |   |   |                     v      v
            +----v+ +v---++ +v-----+      +------------------+
            |DMEM | |PMEM | | IMEM |<---->|     tta_core     |
            |32 x | |32 x | | 4 x  |      |  (CU, 12 buses,  |
            |16 kB| |16 kB| | 32 kB|<---->|   FUs, RFs)      |
            +-----+ +-----+ +------+      +------------------+
```

`braintta_soc` connects these parts. The module `tta_core` sees three memory
ports: instruction fetch, DMEM and PMEM. Each of the three memories has a
single port. The `arbiter` places a multiplexer in front of each port, and the
core always wins it. A host request to a memory that the core is using in that
cycle is held off (`h_gnt` low) until the core leaves the memory free. While
it waits, the host keeps the request unchanged; an assertion checks this.

**Host address map** (byte addresses, bits 21:20 pick the target):

| bits 21:20 | target | layout |
|---|---|---|
| 0 | DMEM | word `addr[18:2]`, bank = word mod 32 |
| 1 | PMEM | same as DMEM |
| 2 | IMEM | instruction `addr[16:5]`, 32-bit slice `addr[4:2]` |
| 3 | debugger | register `addr[4:2]` |

A grant comes in the request cycle. Read data follows one cycle later, with
`h_rvalid`.

**Debugger registers.** The debugger lets the host do three things: start the
core at a chosen address, freeze it between instructions, and learn that the
program has finished.

| offset | register | meaning |
|---|---|---|
| 0x00 | CTRL | bit 0 starts the core (a pulse), bit 1 holds it frozen (a level), bit 2 clears the interrupt |
| 0x04 | STATUS | {irq, halted, done, running} |
| 0x08 | PC | instruction address being executed |
| 0x0C | CYCLES | cycles spent running since the last start |
| 0x10 | START_PC | address of the first instruction after start |

The program ends by triggering the control unit's HALT operation. This raises
`done`, and in the next cycle `irq` rises.

A typical run goes like this:

1. The host writes the program into IMEM, 32 bits at a time.
2. It writes the data into DMEM and PMEM.
3. It writes START_PC, then CTRL.start.
4. It waits for `irq`.
5. It reads the results back.

## 2. The core and its instruction

The core has these units:

- control unit `cu`, with a loop buffer;
- long-immediate unit `imm_unit`;
- three scalar ALUs;
- three scalar register files (RFs), 8 × 32 bit each;
- two vector register files (vRFs), 8 × 1024 bit each;
- a Boolean register file with 2 entries;
- the vector units vMAC (8-bit), vTMAC (ternary), vBMAC (binary), vADD and vOPS;
- two load-store units, LSU-D for DMEM and LSU-P for PMEM.

They are joined by 12 buses (`tta_ic`). Buses 0–5 are scalar and 32 bits wide.
Buses 6–11 are vector buses, 1024 bits wide.

**Instruction word (256 bits).** Each bus has one move slot:
`{src[6:0], dst[6:0], opc[3:0]}`, with slot 0 in the lowest bits.
Above the 12 slots (216 bits) sit three more fields:

- `limm_we`, a 1-bit flag;
- a 32-bit long immediate;
- padding.

When `limm_we` is set, the IMM unit loads the immediate, and a move in the
*next* instruction can read it as source `S_IMM`. The opcode of a slot matters
only when its destination is a trigger port: it selects that unit's operation.
All ids and opcodes are in `tta_pkg`.

| source ids | | destination ids | |
|---|---|---|---|
| 0 | constant zero | 0 | no move |
| 1 | IMM | 1+2k, 2+2k | ALU k operand / trigger |
| 2–4 | ALU 0–2 result | 7, 8, 9 | vMAC activations / weights / accumulator (trigger) |
| 5, 6, 7 | vMAC, vTMAC, vBMAC result | 10–12, 13–15 | same for vTMAC, vBMAC |
| 8, 9 | vADD, vOPS result | 16, 17 | vADD operand / trigger |
| 10, 11 | LSU-D, LSU-P load data | 18, 19, 20 | vOPS vector operand / scalar parameter / trigger |
| 12 | CU return address | 21, 22 / 23, 24 | LSU-D / LSU-P store data / address (trigger) |
| 16+8k+r | RF k entry r | 25, 26 | CU operand / trigger |
| 40+8k+r | vRF k entry r | 32+8k+r | RF k entry r |
| 56, 57 | Boolean b0, b1 | 56+8k+r, 72, 73 | vRF k entry r, Boolean b0, b1 |

**Timing rules:**

- All moves of one instruction happen in the same cycle.
- A trigger written in cycle *n* gives a result that can be read in cycle
  *n+1*. The exception is LSU loads, which are read in cycle *n+2*.
- An operand port written in the same instruction as its trigger is used by
  that operation (bypass).
- Any number of moves may read one register file. Only one move per
  instruction may write each register file, since each file has one write
  port; an assertion checks this.
- Two moves to the same destination in one instruction are a program error,
  also checked by an assertion.
- A scalar bus carries the low 32 bits of its source. A vector bus carries the
  full source, zero-extended if the source is scalar.

In this implementation every port can be reached from every bus. A production
TTA would connect each port to only a few buses, to save wiring. The fuller
connectivity here changes no program semantics.

## 3. Control unit and loop buffer

The instruction memory is read synchronously. The CU computes the next fetch
address in the same cycle that the current instruction executes, so jumps take
effect in the next cycle and there are no delay slots. The CU is a unit like
any other: it has an operand port `in2` and a trigger port `t`.

| opcode | effect |
|---|---|
| JUMP | `pc <= t` |
| CALL | return address `<= pc + 1`, `pc <= t`; return with a JUMP to source 12 |
| JNZ | if `in2 != 0`, `pc <= t` |
| LOOP | run the next `t` instructions `in2` times (a count of 0 runs them once) |
| HALT | stop and raise `done` |

Neural-network layers are deep loop nests, and the innermost body is short.
During the first pass of a LOOP body, the CU copies each executed instruction
into a 16-entry loop buffer. Every later pass is issued from the buffer with
the instruction memory disabled. The energy saved on instruction fetches is the
reason for this buffer. Three limits apply:

- only one loop level is buffered;
- a buffered body must not contain jumps;
- a body must fit in the buffer (assertion).

Outer loops use JNZ.

The debugger's halt freezes the CU at an instruction boundary. The instruction
that would execute next is kept in a hold register, and the CU issues nothing
(`exec` low) until the halt is released.

## 4. The vector MAC units: one vector, three precisions

All three MAC units take three 1024-bit vectors:

- activations, `in1`;
- weights, `in2`;
- the accumulator, `t`, which is also the trigger port.

Each unit has 32 *reduction trees*, one per output channel. The 32-bit lane *i*
of the weight vector belongs to tree *i*. What a 32-bit lane holds depends on
the precision:

| unit | lane *i* of weights/activations | products per tree | accumulator lane |
|---|---|---|---|
| vMAC | 4 × int8 (byte *c* at bits 8c+7:8c) | 4 | 32 bit, bits 32i+31:32i |
| vTMAC | 16 trits, 2 bits each: 00 = 0, 01 = +1, 11 = −1 (10 reads as 0) | 16 | 16 bit, bits 16i+15:16i |
| vBMAC | 32 bits, 1 = +1, 0 = −1 | 32 | 16 bit, bits 16i+15:16i |

- The ternary product of two trits is a gated XNOR. It is 0 if either trit is
  0; otherwise it is +1 when the signs agree and −1 when they differ. A tree
  adds popcount(agree) − popcount(differ).
- The binary tree adds 2·popcount(XNOR) − 32.
- All accumulators wrap around.

Each unit has two modes, chosen by the trigger's opcode:

- **MAC_BCAST** (ordinary convolution, fully connected layers). Lane 0 of the
  activations is broadcast to all 32 trees. One small slice of the input
  channels is multiplied with 32 output channels' weights at once. This reuses
  each input 32 times. It matches an output-stationary schedule: C is
  vectorized by 4, 16 or 32 input channels inside a tree, and M by 32 trees.
- **MAC_VEC** (depth-wise convolution). Tree *i* takes lane *i* of the
  activations, because each depth-wise kernel sees only its own channel.

Each unit starts one operation per cycle. Per cycle, vMAC does 128 8-bit MACs,
vTMAC 512 ternary MACs and vBMAC 1024 binary MACs. A MAC counts as two
operations, so at 300 MHz this is 77, 307 and 614 GOPS. As a result, C must be
a multiple of 4 (8-bit), 16 (ternary) or 32 (binary), and M a multiple of 32,
for full use.

## 5. vOPS: requantization and the rest

A layer's accumulators are much wider than its outputs. The `vops` unit turns
them into the next layer's activations. Its results are packed exactly as a MAC
unit's broadcast lane expects, so a layer's output word can feed the next
layer without repacking.

| opcode | result |
|---|---|
| REQ8 | 32 × int32 → 32 × int8 in the low 256 bits: `sat8(x >>> in2)`; 4 of these words form one vMAC broadcast lane |
| REQT | 32 × int16 → 32 trits in the low 64 bits: +1 if x > th, −1 if x < −th, else 0 |
| REQB | 32 × int16 → 32 bits: 1 if x ≥ th, else 0 |
| RELU32 / RELU16 | max(0, x) per 32-bit / 16-bit lane |
| MAX32 / MAX16 | lane-wise max of two vectors (one MaxPool step) |
| EXTRACT | lane `in2[4:0]` of the vector moved to lane 0 |
| INSERT | lane `in2[4:0]` replaced by the scalar `in1[31:0]` |

`vadd` adds two vectors as 32 × 32-bit lanes (VADD_32) or as 32 × 16-bit lanes
in the low 512 bits (VADD_16). It is used for residual connections.

The ALUs support these operations: add, sub, and, or, xor, shl, shr, shra, mul,
eq, gt (signed), gtu, min, max and pass. They mainly compute addresses.

## 6. Banked memories and the load-store units

DMEM and PMEM (`banked_sram`) each have 32 banks of 4096 × 32-bit words, which
is 512 kB per memory. Word *w* lives in bank *w* mod 32, at row *w* / 32, and
all enabled banks share one row address.

An LSU access moves 2^k consecutive words, with *k* = 0…5 in the opcode's low
bits. That is 32, 64, 128, 256, 512 or 1024 bits. Bit 3 of the opcode makes the
access a store. The byte address must be aligned to the access size; an
assertion checks this. Only the banks that the access touches are enabled. A
32-bit ternary or binary activation word therefore costs one bank access, and a
full weight vector costs 32. Load data returns word *j* in lane *j*, with the
other lanes zero. It is valid two cycles after the trigger: one cycle for the
SRAM and one for the LSU's result register.

IMEM (`imem`) has 4 banks of 1024 × 256-bit instructions, 4 × 32 kB. The top
address bits select the bank, and only one bank is active per fetch. Host
writes fill an instruction one 32-bit slice at a time.

## 7. Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_vmac8`, `tb_vtmac`, `tb_vbmac` | random vectors, both modes, against a per-lane reference |
| `tb_vadd`, `tb_vops` | every opcode, including saturation and threshold edges |
| `tb_alu` | every opcode, with and without operand bypass |
| `tb_regfile`, `tb_imm_unit` | write / hold behaviour |
| `tb_banked_sram`, `tb_imem`, `tb_lsu` | contents against a shadow copy, bank enables, all access sizes, load latency |
| `tb_cu` | program order through LOOP, JUMP, CALL and JNZ; fetch counts with the loop buffer; return address; freeze |
| `tb_tta_ic` | random instructions against an independent model of buses and destinations |
| `tb_tta_core` | a program using ALUs in parallel, the Boolean RF, a JNZ loop, a LOOP from the buffer, CALL/return, vector loads and vOPS |
| `tb_arbiter`, `tb_dbg` | host hold-off while the core is busy, read-back in every region, debugger registers and interrupt |
| `tb_braintta_soc` | end-to-end test, described below |

**End-to-end test (`tb_braintta_soc`).** This test uses the SoC at its full
default size, with no parameter overrides. Through the host port, the
testbench loads a 133-instruction program and random data. It then starts the
core, competes with it for DMEM by polling, freezes and resumes it through the
debugger, and waits for the interrupt. The program computes two output pixels
of each of four layers:

- an 8-bit convolution, with 16 input channels;
- a ternary convolution, with 32 input channels;
- a binary convolution, with 64 input channels;
- an 8-bit depth-wise layer, with 12 taps.

Each layer uses 32 output channels and is followed by requantization. A 16-bit
residual addition comes last. All results are compared with a reference
computed in the testbench. The test also counts each mechanism and fails if one
never happens:

- loop-buffer issues;
- broadcast and per-lane MACs;
- narrow and full-width bank accesses;
- host hold-offs;
- frozen cycles;
- the interrupt.

It builds in well under a minute and runs in about a second.

The full layers of the evaluation are not simulated, because they would only
repeat the same loops. These are 3×3 kernels, 128 input and 128 output
channels, and 16×16 feature maps. At the default sizes their data fits easily:
the 8-bit layer needs 32 kB of input, 144 kB of weights and 128 kB of 32-bit
accumulators, against 512 kB per memory.

**Running a test** with plain Verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tta_pkg.sv tb/tb_asm_pkg.sv \
          tb/tb_braintta_soc.sv --top-module tb_braintta_soc -Mdir obj
./obj/Vtb_braintta_soc
```

`tb_asm_pkg.sv` is needed only by `tb_tta_core` and `tb_braintta_soc`. Other
testbenches are built the same way with their own top.

## 8. Where this design departs from the original, and what is its own

**Follows the original design:**

- 6 scalar and 6 vector buses;
- 32 reduction trees with 4/16/32 inputs and 32/16/16-bit outputs;
- input broadcast, and the vector-vector mode for depth-wise layers;
- vADD on 512- or 1024-bit vectors;
- the vOPS operation classes (requantization to 8, 2 and 1 bit, ReLU, MaxPool,
  element insert/extract);
- two LSUs with banked memories and selective bank enable;
- memory sizes: 32 × 16 kB for DMEM and PMEM, 4 × 32 kB for IMEM;
- a CU with a hardware loop buffer;
- the unit mix: 3 ALUs, 3 RFs, 2 vRFs, a Boolean RF, IMM;
- a debugger that halts the core and signals completion;
- an arbiter at the host/core border.

**This design's own choices:**

- the instruction encoding, source/destination ids and opcodes;
- latencies (one cycle for units, two for loads);
- full bus connectivity;
- register-file depth (8) and the number of Boolean registers (2);
- trit and bit encodings and lane packing;
- the requantization formulas (shift-and-saturate, symmetric threshold);
- the loop-buffer semantics and its depth of 16;
- the host port protocol and address map;
- the debugger register layout;
- the arbitration rule (core first);
- wrap-around accumulators.

**Not included:**

- the RISC-V host, its 16 kB instruction and data memories, the AXI and APB
  buses, and the peripherals (QSPI, GPIO, UART, JTAG);
- the DMA unit;
- I/O pads;
- the compiler toolchain.

The host port `h_*` is where a bus bridge would attach.

## 9. Files

- `rtl/tta_pkg.sv`: sizes, instruction format, ids, opcodes.
- `rtl/braintta_soc.sv`: the top module.
- `rtl/tta_core.sv`: the core.
- `rtl/cu.sv`, `imm_unit.sv`, `tta_ic.sv`, `alu.sv`, `regfile.sv`, `opnd_reg.sv`:
  control, interconnect, scalar units.
- `rtl/vmac8.sv`, `vtmac.sv`, `vbmac.sv`, `vadd.sv`, `vops.sv`: the vector units.
- `rtl/lsu.sv`, `banked_sram.sv`, `sram_bank.sv`, `imem.sv`: the memory side.
- `rtl/arbiter.sv`, `dbg.sv`: the host side.
- `tb/`: one testbench per block, plus `tb_asm_pkg.sv` for writing programs.
