# A reduced RV32 core for Tsetlin-machine inference

A Tsetlin machine (TM) classifies a Boolean input vector by evaluating many
conjunctive *clauses*. Each clause is an AND over a chosen subset of the input
literals, where the literals are the features plus their negations. A class's
clauses vote for (+) or against (−) the class, and the class with the largest
vote sum wins. Inference therefore needs only loads, byte and halfword tests,
AND/OR/XOR, additions and compares. It never multiplies, divides, shifts right
or does a subtraction that a negative immediate cannot replace.

This RTL is a small RISC-V processor built on that fact. It starts from a
conventional 5-stage RV32IM core with Zicsr. It then keeps only the
**27 instructions** that compiled TM inference code actually uses, and removes
everything else from the decoder and the datapath:

| group | instructions |
|---|---|
| ALU | `addi andi xori slli add and or sltu lui` |
| control flow | `jal beq bne blt` |
| memory | `lw lbu lhu sb sw` |
| system | `ecall ebreak eret` (encoded as `mret`) |
| Zicsr | `csrrw csrrs csrrc csrrwi csrrsi csrrci` |

Some common instructions are missing. A compiler's pseudo-instructions are
rewritten to stay inside the set:

| pseudo-instruction | rewritten as |
|---|---|
| `li` | `addi x, x0, imm` |
| `mv` | `addi x, y, 0` |
| `beqz` | `beq x, x0` |
| `snez` | `sltu x, x0, y` |
| `zext.b` | `andi 0xff` |
| `bge x, y` | `blt y, x` |
| `nop` | `add x0, x0, x0` |

There is no `jalr`, so code has no function returns. The inference kernel is
written as one flat loop nest.

The core sits between two tightly coupled memories (TCMs):
- **IMEM** holds the program.
- **DMEM** holds the trained clause model, the Booleanized test input and the
  result words.

The core reaches each memory over an AXI4-Lite link.

## Block diagram

```
             +--------------------------- rv_tm_soc ---------------------------+
             |                                                                 |
             |   +------------------ rv_core ------------------+               |
             |   |                                             |   ibus (AR/R) |   +-----------------+   +---------+
             |   |  rv_ifetch ---------------------------------+---------------+-->| axil_sram_bridge|-->| tcm_ram |<-- imem_host_*
             |   |     |                                       |               |   +-----------------+   | (IMEM)  |
             |   |  rv_decoder + rv_regfile + rv_hazard_unit   |               |                         +---------+
             |   |     |                                       |               |
             |   |  rv_alu / rv_branch_unit / rv_csr (Execute) |   dbus        |   +-----------------+   +---------+
             |   |     |                                       |  (AR/R/AW/W/B)|   | axil_sram_bridge|-->| tcm_ram |<-- dmem_host_*
             |   |  rv_lsu (Memory) ---------------------------+---------------+-->|                 |   | (DMEM)  |
             |   |     |                                       |               |   +-----------------+   +---------+
             |   |  Writeback                                  |               |
             |   +---------------------------------------------+               |
             +-----------------------------------------------------------------+
```

| file | contents |
|---|---|
| `rtl/axil_pkg.sv` | AXI4-Lite channel structs (`ax_t`, `w_t`, `r_t`, `b_t`) |
| `rtl/rv_pkg.sv` | opcodes, CSR addresses, trap causes, the decoded-instruction struct `dec_t` |
| `rtl/rv_decoder.sv` | 27-instruction decoder; everything else is illegal |
| `rtl/rv_regfile.sv` | 32×32 register file, 2 read ports, 1 write port, write-to-read bypass |
| `rtl/rv_alu.sv` | add, and, or, xor, sll, sltu |
| `rtl/rv_branch_unit.sv` | beq / bne / blt, and the pc-relative target |
| `rtl/rv_hazard_unit.sv` | forwarding selects and the load-use interlock |
| `rtl/rv_csr.sv` | machine-mode CSRs, trap entry, `mret` |
| `rtl/rv_ifetch.sv` | pc and the AXI read master for IMEM |
| `rtl/rv_lsu.sv` | Memory stage and the AXI read/write master for DMEM |
| `rtl/rv_core.sv` | the pipeline that ties the above together |
| `rtl/axil_sram_bridge.sv` | AXI4-Lite slave in front of a synchronous RAM port |
| `rtl/tcm_ram.sv` | dual-port byte-writable RAM (core port and host port) |
| `rtl/rv_tm_soc.sv` | top level: core, two bridges, IMEM and DMEM |

Top-level parameters:

| parameter | default | meaning |
|---|---|---|
| `IMEM_BYTES` | 65536 | instruction memory size |
| `DMEM_BYTES` | 8388608 (8 MiB) | data memory size |
| `RESET_PC` | 0 | first instruction fetched |

## The pipeline

The stages are Fetch, Decode, Execute, Memory and Writeback, with at most
one instruction in each. Two signals hold the pipeline:
- `mem_stall` from the Memory stage freezes Fetch, Decode, Execute and Memory
  together.
- `load_use_stall` holds only Fetch and Decode, and sends a bubble into
  Execute.

**Fetch** (`rv_ifetch`) keeps one AXI read in flight. It issues the next
address in the same cycle that it accepts the previous R beat. IMEM answers
one cycle after AR, so straight-line code is delivered at one instruction per
cycle. The R channel's data is used directly as the Fetch/Decode register.
When Decode cannot accept an instruction, Fetch simply does not take R, and
the AXI handshake provides the back-pressure.

**Decode** decodes the instruction and reads two registers. A register written
by Writeback in the same cycle is bypassed inside the register file, so
Writeback never needs a path into Decode.

**Execute** does the following:
- selects each operand from the ID/EX register, the Memory stage or the
  Writeback stage;
- computes the ALU result;
- evaluates branches;
- performs the CSR read-modify-write;
- decides whether to trap.

Taken branches, `jal`, traps and `eret` redirect Fetch from Execute.

**Memory** (`rv_lsu`) offers one AXI transaction per load or store and holds
the *entire* pipeline until the response arrives. With DMEM answering one
cycle after the request, each memory instruction spends two cycles here.

**Writeback** writes the register file and counts the instruction in
`minstret`.

### Hazards, and what they cost

| situation | handling | cost |
|---|---|---|
| ALU result needed by the next instruction | forwarded from Memory (`FWD_MEM`) | 0 |
| result needed two instructions later | forwarded from Writeback (`FWD_WB`) | 0 |
| load result needed by the next instruction | Decode held one cycle, then `FWD_WB` | 1 cycle |
| load or store | Memory stage waits for the AXI response | 1 cycle with a 1-cycle TCM |
| taken branch, `jal`, trap, `eret` | resolved in Execute; the two younger instructions are discarded | refetch from the target |

The newer value always wins when both forwarding sources match: the Memory
stage has priority over Writeback. `x0` is never forwarded.

The least obvious part is **operands held across a stall**. When `rv_lsu`
starts holding the pipeline, the instruction already in Writeback still
writes the register file and leaves. From then on, Writeback receives
bubbles. The instruction waiting in Execute may have been taking one of its
operands from that departed instruction over the Writeback forward path.
So while stalled, Execute copies its forwarded operands back into the ID/EX
register every cycle. The value it holds is therefore still right when the
pipeline moves again.

The second subtle part is **fetch after a redirect**. When Execute redirects,
the read that Fetch has already issued on the old path may still be
outstanding. Fetch then does two things:
- it marks that response stale, and drops it when it arrives;
- if its AR had been offered but not yet accepted, it keeps the address and
  valid stable until the handshake completes. AXI forbids withdrawing it.

Only then does it issue the target address. With a 1-cycle TCM the stale case
cannot arise in the assembled system. The unit testbench of `rv_ifetch`
exercises it with random memory latency.

### Traps and CSRs

`ecall`, `ebreak` and any word the decoder does not recognise trap in
Execute. This includes every RV32I/M instruction that was removed, so
unsupported code fails loudly instead of silently doing something else.

On a trap:
- `mepc` receives the trapping pc;
- `mcause` receives 11, 3 or 2 respectively;
- `mtval` receives the instruction word for an illegal instruction;
- `MIE` is saved to `MPIE` and cleared;
- Fetch restarts at `mtvec`, which is direct mode only.

`eret` restores `MIE` and jumps to `mepc`. Only machine mode exists, and there
are no interrupts.

The CSRs present are:

| CSR | notes |
|---|---|
| `mstatus` | MIE, MPIE; MPP reads as M |
| `misa` | reads `0x40000100`, i.e. RV32I |
| `mtvec` | |
| `mscratch` | |
| `mepc` | |
| `mcause` | |
| `mtval` | |
| `mcycle` | 32 bits, writable |
| `minstret` | 32 bits, writable |

Every other CSR address reads as zero and ignores writes. As the spec
requires, `csrrs`/`csrrc` with `rs1 = x0` (or a zero immediate) read without
writing.

## Bus and memories

Each AXI4-Lite channel is one packed struct (`valid` plus payload), and its
`ready` travels as a separate wire. The structs are in `axil_pkg`.

`axil_sram_bridge` turns the channels into one synchronous RAM port:
- **Reads.** It accepts a read whenever no R beat is waiting, or the waiting
  one is being taken. The registered RAM output becomes the R beat one cycle
  later and is held until it is taken.
- **Writes.** It accepts a write when AW and W are both valid and the B slot
  is free, and acknowledges it on B one cycle later.
- **Conflicts.** A read and a write offered in the same cycle are served read
  first.
- **Checks.** Assertions inside the bridge check that masters keep AR, AW and
  W stable until accepted.

`tcm_ram` is a word-wide RAM written as an array with byte enables. Its second
port is the *host port* of the top level. A host (the testbench, or an
external loader) writes the program and the data before releasing reset, and
reads the results afterwards.

## Running inference: the DMEM layout

The programs in `tb/tm_asm.sv` are assembled by a small two-pass assembler
written as an SV class (`Asm`, with labels and branch patching). They expect
this layout (byte addresses):

| address | contents |
|---|---|
| `0x000` | number of classes *M* |
| `0x004` | clauses per class *N* |
| `0x008` | number of + polarity clauses (the first *N/2*) |
| `0x00C` | literal count *L = 2F* |
| `0x010` | ← predicted class |
| `0x014` | ← done flag |
| `0x018` | ← trap count |
| `0x01C` | ← last `mcause` |
| `0x020` | ← `mcycle` at the end |
| `0x040` | ← vote sum of each class (one word each) |
| `0x200` | literal values, one byte (0/1) per literal |
| `0x1000` | clause model |

IMEM word 256 (byte `0x400`) holds the trap handler. It counts the trap,
records `mcause`, advances `mepc` by 4 and returns with `eret`.

There are two model formats:

- **T1, vanilla.** Each clause is stored as a "useful" byte followed by one
  include byte per literal, so it takes *L + 1* bytes. A clause is true when
  every included literal is 1. Every literal is visited.
- **T2, sparse.** Each clause is stored as a 16-bit count followed by that many
  16-bit indices of included literals. Only the included literals are read, so
  the cost scales with the model's sparsity instead of with *L*. An empty
  clause outputs 0.

Both programs start each class's vote at *N*. A true clause with index below
*N/2* adds 1, and any other true clause subtracts 1. The class with the
largest sum wins, and ties go to the lower index. The vote is applied as soon
as each clause is evaluated, instead of first storing all clause outputs. The
result is the same and memory use is lower.

The start of each program deliberately executes one removed instruction
(`sub`) and one `ebreak`. Every run therefore also exercises the trap path
and `eret`.

### Sizes and measured cycle counts

The DMEM size of 8 MiB is chosen so that the largest case below fits in T1
form. That case is a 10-class, 784-feature model with 300 clauses per class:
4096 + 10·300·1569 = 4,711,096 bytes. T2 needs only 2 + 2·(included literals)
bytes per clause.

With random models at 300 clauses per class and a one-cycle TCM, the design
takes these cycle counts. The times are at a 12 ns clock.

| classes × features | T1 cycles | T2 cycles | T1 time | T2 time |
|---|---|---|---|---|
| 2 × 324 | 4.30 M | 68 k | 52 ms | 0.81 ms |
| 4 × 360 | 9.19 M | 141 k | 110 ms | 1.69 ms |
| 5 × 180 | 5.80 M | 177 k | 70 ms | 2.12 ms |
| 6 × 128 | 5.04 M | 230 k | 60 ms | 2.76 ms |
| 8 × 160 | 8.34 M | 256 k | 100 ms | 3.07 ms |
| 10 × 784 | 50.7 M | 732 k | 608 ms | 8.78 ms |

T2 cycle counts depend on how many literals each clause includes. The random
models here include about a dozen literals per clause. T1 counts depend almost
only on *M·N·L*.

### The binarized-network comparison program

The same 27 instructions also run binarized-network code. `build_bnn` in
`tb/tm_asm.sv` is a two-layer binary MLP:
- The input bits are packed 32 to a word.
- Each of 32 hidden neurons fires when the number of input bits that equal its
  weight bits (an XNOR popcount) reaches a threshold.
- Each class scores the XNOR popcount of the 32-bit hidden word with its own
  weight word, and the highest score wins.

The reduced set has no register `xor` and no `not`, so the program builds
XNOR as `(a & b) | ~(a | b)`, with `xori rd, rs, -1` as the inverter. The
popcount walks a one-hot mask: `and`, then `sltu rd, x0, t` to turn
"non-zero" into 1, then `add`.

At the six datasets' input widths and class counts, one inference takes
28 k to 166 k cycles. The weights take 0.5 to 3.2 KB of DMEM.

## Testbenches

Every testbench is self-checking and ends with one line:

```
TB_RESULT checks=<n> failures=<n>
```

Each also has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_rv_alu`, `tb_rv_branch_unit`, `tb_rv_decoder` | random and directed vectors against an independent model; the decoder also checks that removed instructions are illegal |
| `tb_rv_regfile` | random writes and reads, the bypass, x0 |
| `tb_rv_hazard_unit` | forwarding priority and the load-use stall over random pipeline states |
| `tb_rv_csr` | CSR ops, the rs1 = 0 rule, trap entry and `mret`, the counters |
| `tb_rv_ifetch` | sequential fetch at 1 per cycle, redirects with random memory latency, stale responses dropped, AR held stable |
| `tb_rv_lsu` | all five memory ops, byte lanes, the stall length |
| `tb_axil_sram_bridge` | random AXI traffic against a reference memory, the B count, one read per cycle |
| `tb_tcm_ram` | both ports, byte enables, collisions |
| `tb_rv_core` | a directed program using all 27 instructions, forwarding, load-use, traps and `eret`, compared with an instruction-set model written in the testbench; run with random-latency and with one-cycle memories, where ten dependent adds must take exactly 11 cycles |
| `tb_rv_tm_soc` | full system at default sizes (see below) |
| `tb_tm_workloads` | the six model sizes in the table above, T1 and T2 |
| `tb_bnn_workloads` | the binary MLP at the six datasets' input widths and class counts; checks the hidden word, every score and the class |

`tb_rv_tm_soc` runs the full system at its default sizes. It loads the
assembled T1 and T2 programs and random models through the host ports, runs
them, and compares the predicted class and every vote sum with a reference
computed in the testbench. It also counts how often each pipeline mechanism
happened and fails if any never did:
- forwarding from Memory;
- forwarding from Writeback;
- load-use stalls;
- memory waits;
- redirect flushes;
- traps;
- `eret`;
- CSR writes.

`tb_tm_workloads` takes about a minute.

Plain Verilator 5 builds and runs any of them. For example:

```
verilator --binary --timing -Wno-fatal --top-module tb_rv_tm_soc \
    rtl/axil_pkg.sv rtl/rv_pkg.sv rtl/*.sv \
    tb/rv_asm_pkg.sv tb/tm_asm.sv tb/tb_rv_tm_soc.sv
./obj_dir/Vtb_rv_tm_soc
```

A unit testbench needs only its module, the packages that module imports, and
the testbench file.

## Where this design departs from, or adds to, its source

The published description fixes these points:
- the instruction list;
- the 5-stage pipeline with forwarding;
- Zicsr;
- the core–AXI–TCM arrangement;
- the loading of program, clauses and input into IMEM and DMEM.

It also reports a 12 ns clock for the reduced core (11.83 ns critical path on
a Zynq-7000), which the testbenches use.

It does not describe the core's internals, because the core came from an
existing open-source RV32IM design. Everything below is therefore this
design's own choice:

- **Where branches resolve and how hazards are handled.** Branches resolve in
  Execute. Forwarding uses two sources. There is a one-cycle load-use
  interlock, and the Memory stage blocks.
- **`eret` is implemented as `mret`.** `csrrwt`, which appears in the
  published list, is read as `csrrwi`, since no `csrrwt` instruction exists.
- **Privilege.** Only machine mode exists, with no interrupts and a direct
  `mtvec`. The full core also had user and supervisor modes and a
  configurable pipeline depth. These were left out because TM inference
  does not use them.
- **Bus flavour.** The bus is AXI4-Lite, with one outstanding transaction per
  master.
- **Memory sizes.** IMEM is 64 KiB and DMEM is 8 MiB; none are given.
- **Misalignment.** Misaligned `lw`/`lhu` are not trapped: the low address
  bits select the lane. Error responses are ignored.
- **The inference programs.** They are hand-assembled equivalents of the two
  published algorithms. They are not compiler output. Their instruction
  counts therefore differ from those of a compiled C++ kernel.
- **The BNN program's network shape.** The trained comparison networks were
  not published, so the binary MLP's shape is this design's own. Only its
  input widths and class counts come from the evaluated datasets.
- **What is not included.** The full RV32IM baseline core (with its
  multiplier/divider) is not included. Power and
  timing figures come from FPGA synthesis and are not reproduced by this
  RTL.
