# A 3-slow microprogrammed accumulator processor

C-slowing turns one processor into C processors without adding a datapath. Every
register of the machine is replaced by C registers. C independent threads then
circulate through the same logic, each advancing one step every C clocks. The
extra registers can be moved into the combinational logic (retiming), so the
clock gets faster while each thread still sees a machine of its own. No
scheduler, operating system or interlock is needed: the interleaving is fixed
and round-robin, and no two steps in flight ever belong to the same thread.

This RTL applies the idea to a very small microprogrammed accumulator machine
with 11 instructions. The default is C = 3 threads, 8-bit words, and a shared
memory of four 256-word pages.

## The base machine

The unmodified machine has the following registers:

- a program counter `pc`
- a memory address register `MAR`
- an instruction register `IR`
- a `Buffer` for operands
- the accumulator `A`
- a zero flag `z` and a carry flag `c`
- a micro-program counter

One memory `M` holds both code and data. Control comes from a 53-row
microprogram (`rtl/control_store.sv`). Each row does one of two things:

- one register transfer, after which control falls through to the next row;
- one test with a jump ("if XC1 go to INCA", "go to Fetch").

| rows  | routine | what it does |
|-------|---------|--------------|
| 0     | reset   | `pc <- 0` |
| 1-2   | fetch   | `MAR <- pc`; `IR <- M(MAR), pc <- pc+1` |
| 3-7   | decode  | I3 → 14; XC0 → CMA; XC1 → INCA; XC2 → DCRA; otherwise HALT |
| 8-13  | CMA, INCA, DCRA | `A <- ~A`, `A <- A+1`, `A <- A-1`, then back to fetch |
| 14-16 | memory-reference decode | XC0 → LDSTO; XC1 → ADSUB; XC2 → JUMP; otherwise AND |
| 17-22 | AND     | read the operand address, then read the operand; `A <- A & Buffer` |
| 23-31 | LOAD/STO | read the operand address into MAR; I0 = 1 → STO `M(MAR) <- A`; otherwise LOAD `A <- M(MAR)` |
| 32-40 | ADD/SUB | read the operand; I0 = 1 → SUB, otherwise ADD |
| 41-51 | JOZ/JOC | `MAR <- pc`; I0 = 0 → JOZ; I0 = 1 → JOC. Taken: `pc <- M(MAR)`. Not taken: `pc <- pc+1` |
| 52    | HALT    | jumps to itself |

Memory-reference instructions take two words: the opcode, then an absolute
address (or a jump target).

### Instruction encoding

The source only names the decoded signals I3, XC0..XC2 and I0. The bit
assignment is this design's own:

| IR[3] (I3) | IR[2:1] | IR[0] (I0) | instruction |
|------------|---------|------------|-------------|
| 0 | 00 | x | CMA |
| 0 | 01 | x | INCA |
| 0 | 10 | x | DCRA |
| 0 | 11 | x | HALT |
| 1 | 00 | 0 / 1 | LOAD a / STO a |
| 1 | 01 | 0 / 1 | ADD a / SUB a |
| 1 | 10 | 0 / 1 | JOZ t / JOC t |
| 1 | 11 | x | AND a |

IR[7:4] is ignored. As hex opcodes:

| CMA | INCA | DCRA | HALT | LOAD | STO | ADD | SUB | JOZ | JOC | AND |
|-----|------|------|------|------|-----|-----|-----|-----|-----|-----|
| 00 | 02 | 04 | 06 | 08 | 09 | 0A | 0B | 0C | 0D | 0E |

### Flags

The flag rules are also this design's own:

- `z` is set when the new A is zero. It is updated on every write of A.
- `c` is the carry out of INCA and ADD, and the borrow of DCRA and SUB.
- CMA, AND and LOAD leave `c` unchanged.

### Micro-step costs

Counting micro-steps (rows executed) per instruction gives these costs:

| reset | CMA | INCA | DCRA | HALT | LOAD | STO | ADD | SUB | AND | JOZ | JOC |
|-------|-----|------|------|------|------|-----|-----|-----|-----|-----|-----|
| 1 | 6 | 7 | 8 | 7 | 11 | 10 | 12 | 12 | 12 | 11 | 12 |

The HALT cost counts the steps up to the point of entering row 52.

## How the machine is C-slowed (`rtl/cslow_core.sv`)

The state of a thread falls into three kinds, following the C-slow recipe:

1. **State registers**: uPC, pc, MAR, IR, Buffer, z and c. These travel
   around a ring of C register layers. Each layer holds one thread.
2. **The register file**: here it holds only A. It is made C times larger
   (`rtl/cslow_regfile.sv`). The hardware thread counter (`rtl/thread_counter.sv`)
   selects the bank.
3. **Main memory**: this stays shared and outside the ring
   (`rtl/shared_memory.sv`). A per-thread translation entry (`rtl/thread_tlb.sv`)
   gives each thread its own page, so each thread believes it owns the memory.

In the ring, the C registers are placed where retiming would push them:

```
        +--> U: control-store read (uPC -> micro-instruction)
        |      [r1: state + micro-instruction]
        |    M: thread counter -> register bank, TLB entry
        |       memory read/write at {page, MAR}; read A
        |      [r2 + memory read register]
        |    X: decode IR, ALU, next uPC, write A back
        |      [C-2 registers of state]
        +-------------------------------------------+
```

The ring holds exactly C registers, one per thread. C must therefore be at
least 3, and elaboration stops with an error otherwise.

A thread's two consecutive micro-steps are always C clocks apart. Every value
a step needs was therefore written at least one full turn earlier. This is why
the design has no hazard logic at all. The register bank is read in stage M
and written in stage X by the same thread. The next access from that thread
comes C clocks later.

### Exact timing

Count enabled clocks from 0 after reset. Thread t executes its k-th
micro-step in stage X in this clock:

```
C*(k-1) + ((t+1) mod C)
```

Thread C-1 goes first, because it sits in the last stage at reset.

A program that needs N micro-steps raises `halted[t]` at the end of clock
`C*(N-1) + ((t+1) mod C)`. C programs together therefore need about
C·max(N) clocks of the fast clock, which is max(N) "thread-cycles". The
unmodified machine needs sum(N) of its slower clocks. The testbenches check
this formula exactly, cycle by cycle, with random stalls inserted.

The source reports, for the 3-slow design on a Spartan-3 FPGA:

- a minimum period of 11.558 ns, against 29.976 ns for the unmodified machine;
- 4,270 slice registers, against 2,107 for the unmodified machine.

This RTL was not put through an FPGA flow, so those numbers are not
reproduced. Synthesis with yosys' generic flow gives:

- 180 flip-flop bits
- 8,192 bits of memory
- a 960-bit microprogram ROM

## Top level (`rtl/cslow_processor.sv`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `en` | in | 1 | 1 = run; 0 freezes every thread |
| `host_we`, `host_addr`, `host_wdata` | in | 1, DW+PGW, DW | host write into memory (physical address `{page, vaddr}`) |
| `host_rdata` | out | DW | word at `host_addr`, one clock later |
| `tlb_we`, `tlb_tid`, `tlb_page` | in | 1, TW, PGW | map thread `tlb_tid` to page `tlb_page` |
| `halted` | out | C | thread has reached HALT |
| `trace_tid`, `trace_upc`, `trace_a` | out | TW, 6, DW | micro-step finishing this clock: its thread, its row, and A after it |

The parameters are:

- `C` (threads, default 3)
- `DW` (word width, default 8; addresses have the same width because `pc <- M(MAR)`)
- `PGW` (page-number bits, default 2)

After reset, thread t starts at address 0 of page t. The host port can load
memory and read it back at any time, including while the threads run. If the
host and a thread write the same word in the same clock, the thread's write wins.

A typical session:

1. Hold `rst_n` low.
2. Write each thread's program into its page through `host_*`.
3. Release reset with `en = 1`.
4. Wait until `halted` is all ones.
5. Read the results back through `host_*`.

## Where this departs from, or adds to, the source

- **Caches.** The generic C-slow processor is drawn with separate instruction
  and data caches. The machine this RTL builds (the microprogrammed one)
  reads one memory directly, so there is one shared memory and no cache. Its
  read is registered, which is the "pipelined" memory the C-slow scheme asks for.
- **TLB.** The idea is taken from the source: a translation memory made C
  times larger, so each thread has its own. Its form, one page register per
  thread, is the simplest one that gives isolation. It is this design's choice.
- **Retiming.** The position of the retimed registers is chosen by hand
  (after the control store, after the memory read). The source relies on a
  retiming tool. Because of this choice, C must be 3 or more. The unmodified
  (1-slow) machine is not provided.
- **Widths, reset values, the stall input, the host port, the instruction
  encoding and the flag rules** are all choices made here. The source gives
  none of them.
- **Microprogram details.**
  - Row 36 of the source's table lost the value it tests ("if I0 = , go to
    SUB"). I0 = 1 is used, matching the LOAD/STO pair, where I0 = 1 selects
    the second instruction.
  - The table calls the decrement routine both DCA and DCRA. Both names mean
    the routine at row 12.
- **Thread-count comparison.** The bar chart has bars that are not labelled
  with numbers. The conventional machine's bars look shorter than the text's
  rule, which says its time is the sum of the threads' times. The rule is what
  is implemented and tested.
- **Not built.** Interrupt handling and branch predictors are mentioned as
  parts a C-slowed processor must adapt. The machine here has neither.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_control_store` | all 64 rows against a textual copy of the row table |
| `tb_instr_decoder` | all 256 opcodes |
| `tb_microsequencer` | every branch condition with random inputs |
| `tb_alu` | every operation against integer arithmetic, including the flag rules |
| `tb_cslow_regfile`, `tb_thread_counter`, `tb_thread_tlb`, `tb_shared_memory` | against array or counter models |
| `tb_cslow_core` | the core at C = 3 and C = 5, with a behavioural memory, random programs and random stalls |
| `tb_cslow_processor` | the whole processor at default parameters (described below) |
| `tb_fig5_workload` | CMA; HALT (14 micro-steps) on 1, 2 and 3 threads finishes in 14 thread-cycles every time |

`tb_cslow_core` compares against an instruction-level reference model in
`tb/tb_isa_pkg.sv`. That model is independent of the microprogram. The test
checks results, memory, micro-step counts, strict round-robin order and the
exact halt clock of every thread.

`tb_cslow_processor` runs 12 rounds. Each round uses a count-down loop with
backward jumps, or random programs. Thread 2 is remapped to page 3, and page 2
is a guard that must stay unchanged. The host also reads memory during the
run. The test fails unless every instruction ran, JOZ and JOC were each both
taken and not taken, and stalls and remaps happened.

The random programs only jump forward, so they always terminate. The
reference model also reports how often each instruction ran.

To simulate, for example the whole processor:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/cslow_pkg.sv tb/tb_isa_pkg.sv rtl/*.sv tb/tb_cslow_processor.sv \
  --top-module tb_cslow_processor
./obj_dir/Vtb_cslow_processor
```

For the core testbench, add `tb/core_harness.sv`. The leaf testbenches need
only `rtl/cslow_pkg.sv`, their module and `tb/tb_isa_pkg.sv`.

## Files

| file | contents |
|------|----------|
| `rtl/cslow_pkg.sv` | micro-operation and condition enums, micro-instruction and decode structs |
| `rtl/control_store.sv` | the 53-row microprogram |
| `rtl/instr_decoder.sv` | IR → I3, XC0..XC3, I0 |
| `rtl/microsequencer.sv` | next micro-address |
| `rtl/alu.sv` | accumulator operations and flags |
| `rtl/cslow_regfile.sv` | C-banked register file |
| `rtl/thread_counter.sv` | round-robin thread counter |
| `rtl/thread_tlb.sv` | per-thread page mapping |
| `rtl/shared_memory.sv` | dual-port shared memory |
| `rtl/cslow_core.sv` | the C-slowed pipeline ring |
| `rtl/cslow_processor.sv` | top level |
