# eGPU: a scalable soft GPGPU streaming multiprocessor in SystemVerilog

The eGPU is a small SIMT processor meant to sit inside an FPGA design. One
streaming multiprocessor (SM) has 16 scalar processors (SPs) that all execute
the same instruction. Each SP holds the registers of many threads, and a
thread block of up to 512 threads runs as 32 *wavefronts* of 16 threads. Every
clock, one wavefront of one instruction goes through the 16 SPs.

The main idea is that the thread space can be narrowed **instruction by
instruction**, at no cost:

- A 4-bit field in every instruction word says how many SPs take part (all
  16, the first 4, or SP0 only).
- The same field says how many wavefronts take part (wavefront 0 only, all,
  the first half, or the first quarter).

So one program can switch between three ways of running:

- A full SIMT machine (all SPs, all wavefronts).
- A multi-threaded CPU (SP0 only, all wavefronts).
- A single-threaded microcontroller (SP0, wavefront 0).

An instruction that covers fewer threads also takes fewer clocks. This matters
most for reductions and for shared-memory traffic, where loads and stores take
several clocks per wavefront.

The design is also *statically* scalable. Parameters set:

- the number of threads and registers per thread;
- the shared-memory size;
- the predicate stack depth (0 removes predicates entirely);
- whether the dot-product core is present.

The defaults are the configuration used for the vector and matrix workloads:

| Parameter | Default | Meaning |
|---|---|---|
| `NSP` | 16 | SPs |
| `THREADS` | 512 | threads per block, 32 wavefronts |
| `REGS` | 32 | registers per thread, 16384 in total |
| data width | 32 | 32-bit integer ALU and FP32 |
| `SMEM_WORDS` | 32768 | 128 KB shared memory: 4 read ports, 1 write port |
| `PRED_LEVELS` | 5 | predicate levels |
| `IMEM_DEPTH` | 512 | program words |
| `DOT_EN` | 1 | dot-product core present |
| `SMEM_WPORTS` | 1 | shared-memory write ports: 1 = DP memory, 2 = QP memory |

## Block structure

```
            host ports (program load, data load/unload, start/done)
                 |                                   |
           +-----v------+  43-bit IW   +-------------v-----------------+
           | instr_mem  |------------->| sequencer                     |
           +------------+              |  fetch, JMP/JSR/RTS/LOOP/INIT |
                                       |  thread generator (width,     |
                                       |  depth, LOD/STO serialisation)|
                                       +--------------+----------------+
                                  issue bundle + 16 lane enables
            +--------------+--------------+-----------+----------------+
            v              v              v                            v
        +-------+      +-------+      +-------+                    +--------+
        | SP0   |      | SP1   |  ... | SP15  |   Ra,Rb of all SPs | dot    |
        |regfile|      |       |      |       |------------------->| core + |
        |INT ALU|      |       |      |       |                    | invsqrt|
        |FP ALU |<--------------------------------- result into SP0 +--------+
        |pred.  |      |       |      |       |
        +---+---+      +---+---+      +---+---+
            |  address / store data / load data
        +---v--------------v--------------v---+
        | mem_xbar: read-address mux (4 ports)|
        | write mux 16 -> 4 -> 1, data return |
        +-----------------+-------------------+
                          v
                 +-----------------+
                 | shared_mem      |  4 read ports, 1 write port
                 +-----------------+
```

| File | Role |
|---|---|
| `rtl/egpu_pkg.sv` | Instruction-word layout, opcodes, types, condition codes, issue bundle |
| `rtl/egpu_top.sv` | One SM: wires everything together and provides the host ports |
| `rtl/instr_mem.sv` | Program memory |
| `rtl/sequencer.sv` | Fetch, control flow, thread generator |
| `rtl/sp.sv` | One scalar processor |
| `rtl/regfile.sv` | Thread registers: two copies, so there are 2 read ports and 1 write port |
| `rtl/int_alu.sv` | 32-bit integer ALU, 5 stages |
| `rtl/fp_alu.sv` | FP32 ALU, 4 stages |
| `rtl/fp32_add.sv` | FP32 adder used by the FP ALU and the dot core |
| `rtl/fp32_mul.sv` | FP32 multiplier used by the FP ALU and the dot core |
| `rtl/predicate_block.sv` | Per-SP predicate stacks, one per thread |
| `rtl/predicate_stack.sv` | One thread's predicate stack |
| `rtl/shared_mem.sv` | Shared data memory: 4 read ports, 1 write port |
| `rtl/mem_xbar.sv` | Muxes between the 16 SPs and the memory ports |
| `rtl/dot_core.sv` | Dot-product / reduction core |
| `rtl/invsqrt.sv` | FP32 reciprocal square root |

## Instruction word

The word is 43 bits, numbered 43 down to 1 (`iw_t` in `egpu_pkg`):

| Bits | Field |
|---|---|
| 43:42 | width: `00` all 16 SPs, `01` SPs 0-3, `10` SP0 only, `11` undefined (treated as all) |
| 41:40 | depth: `00` wavefront 0, `01` all wavefronts, `10` first half, `11` first quarter |
| 39:34 | opcode |
| 33:32 | type: `00` UINT32, `01` INT32, `10` FP32 |
| 31:27 | Rd |
| 26:22 | Ra |
| 21:17 | Rb |
| 16:1 | 16-bit immediate |

"All wavefronts" means the block depth set by the host on `cfg_depth`, which
is threads / 16 (1 to 32).

The instructions are as follows. The type field selects integer or FP32 where
both exist.

- **Arithmetic:** ADD, SUB, NEG, ABS, MAX, MIN.
- **Integer only:**
  - MUL16LO/HI and MUL24LO/HI: 16×16 and 24×24 products, low part or the
    product shifted right by 16/24.
  - AND, OR, XOR, NOT, cNOT (`Ra==0 ? 1 : 0`), BVS (bit reverse).
  - SHL, SHR (arithmetic for INT, logical for UINT).
  - POP (population count).
- **FP32 only:** MUL.
- **Memory:**
  - `LOD Rd,(Ra)+off` reads shared memory.
  - `STO Rd,(Ra)+off` writes it.
  - `LDI Rd,#imm` loads an immediate: UINT zero-extends, INT sign-extends,
    FP32 places the immediate in the upper half.
  - TDX and TDY give the thread's SP number and wavefront number.
- **Control:**
  - JMP, JSR, RTS: the target address is in the immediate.
  - `INIT n`, then `LOOP a`: the body between them runs n times.
  - STOP halts the SM and raises `done`.
  - NOP.
- **Predicates:**
  - `IF.cc Ra,Rb` has its condition code in Rd[2:0]: EQ 0, NE 1, LT 2, LE 3,
    GT 4, GE 5. The compare is signed, unsigned or FP32 according to the type
    field.
  - ELSE, ENDIF.
- **Extension (dot core):**
  - `DOT Rd,Ra,Rb`: the sum over the SPs of Ra·Rb.
  - `SUM Rd,Ra`: the sum over the SPs of Ra.
  - `INVSQR Rd,Ra`: 1/√Ra of SP0.

The field positions and the width/depth codes are fixed by the original
design. The original narrows the three register fields when fewer registers
are configured. Here the word keeps 5-bit register fields for every `REGS`;
only their low log2(`REGS`) bits are used.

The numeric opcode values and the type and condition-code encodings are this
implementation's own.

`tb/egpu_asm_pkg.sv` has two helper functions that build instruction words:

- `ins(width, depth, op, type, rd, ra, rb, imm)`
- `ctl(op, imm)`

## How long an instruction takes

The sequencer expands each non-control instruction into *thread operations*.
It issues one per clock and cannot be stalled. Per selected wavefront:

| Instruction | Clocks per wavefront | Why |
|---|---|---|
| ALU, LDI, TDX/TDY, IF/ELSE/ENDIF, DOT/SUM | 1 | all selected SPs work in parallel |
| LOD | ceil(selected SPs / 4) | 4 read ports; SP j uses port j mod 4 |
| STO | number of selected SPs (half that with `SMEM_WPORTS = 2`) | 1 write port |
| INVSQR | 1 | SP0 only |
| JMP/JSR/RTS/INIT/LOOP/STOP/NOP | 1 in total | handled by the sequencer alone |

Examples:

- A full-width load over 32 wavefronts takes 128 clocks.
- A full-width store over 32 wavefronts takes 512 clocks.
- The same store with width "SP0 only" and depth "wavefront 0" takes 1 clock.

Programs use this to write reduction results cheaply. Transposing an n×n
matrix therefore needs n² store clocks plus n²/4 load clocks, plus the
address arithmetic.

Fetch has no bubbles. The program memory is addressed with the *next* PC,
computed in the clock the current instruction finishes. Taken jumps and loop
branches therefore cost only their own clock.

## The SP pipeline and the 9-clock rule

Stage numbers count clocks after the issue bundle leaves the sequencer:

| Stage | What happens |
|---|---|
| S0 | Register-file read addresses `{wavefront, Ra}`, `{wavefront, Rb}`. For STO, Rd is read instead of Rb. |
| S1 | Register data registered into the operand stage |
| S2 | Operands enter the ALUs; predicate update; `thread_active` sampled; address Ra+offset formed |
| S3 | Address, store data, load/store requests and dot operands leave the SP |
| S4 | mem_xbar registers the selected addresses and write request |
| S5 | Memory read / write |
| S6 | Read data returned and registered |
| S7 | Write-back mux: INT ALU (5 stages), FP ALU (4 stages + 1 balancing register), load data, immediate or thread ID |
| S8 | Register file written |

There is **no hazard detection or forwarding**. A result can be read by an
instruction whose thread operation issues 9 or more clocks after the one that
produced it. If it issues earlier, it reads the old value.

With 32 wavefronts, a full-depth instruction already spans 32 clocks. The rule
therefore only matters in two cases:

- narrow instructions (restricted width or depth);
- small thread blocks.

The program must then add NOPs. For d wavefronts, the last wavefront's
consumer issues d + (NOPs) clocks after its producer, for ALU results and for
loads alike. So 9 − d NOPs is the minimum. The FFT and bitonic-sort
testbenches use 12 − d for margin.

A store reads its data at S0 like any other operand, so the same rule applies
to storing a freshly computed value.

The dot core writes its result into SP0 10 clocks after S3, through a second
write source on SP0's register file. A program must wait about 13 issue slots
before reading the result of DOT, SUM or INVSQR.

That second write source shares SP0's single write port, and there is no
arbitration. While dot-core results are landing, the port belongs to the dot
core; an ordinary SP0 write-back in the same clock is lost. This lasts from
about 13 to 14 + depth clocks after the DOT issues. An assertion in `sp`
reports such a collision in simulation.

A program must therefore not let an instruction that writes SP0 registers
reach write-back during that window. For example, leave about 6 NOPs between
a full-depth DOT and a following SP0 ADD; `tb_wl_mmm` does exactly this.

## Predicates

Every thread has its own stack of 1-bit predicates, `PRED_LEVELS` deep.
Each level resets to 1.

- **IF** pushes the condition (Ra cc Rb), ANDed with the thread's current
  status, so nested IFs work.
- **ELSE** inverts the top entry.
- **ENDIF** pops, shifting a 1 in at the bottom.

The top entry is the thread's `thread_active`. It gates the register-file
write and the shared-memory write. All threads still take their clock slots
whether they are active or not.

Each SP holds the stacks of its threads in a `predicate_block`:

- A comparator per stack picks out the wavefront being executed, so only that
  thread's stack moves.
- A mux selects that thread's status.

The interface is narrow: the wavefront number, a decoded IF/ELSE/ENDIF and
one condition bit.

Limitation: ELSE only inverts the top entry. An ELSE inside a region whose
*enclosing* condition is false therefore turns the thread back on. Nested
IF/ELSE code must keep the outer condition in mind.

Setting `PRED_LEVELS = 0` removes the block; every thread is then always
active.

## Shared memory and its muxes

The memory has four read ports and one write port. It is modelled as four
copies of one array that share a common write.

- **Reads:** read port k is wired to SPs k, k+4, k+8 and k+12. The sequencer
  issues a LOD to at most one SP of each set per clock, so at most four loads
  go out per clock.
- **Stores:** a store picks its SP in two levels, first within a group of 4,
  then among the 4 groups.
- **Pipelining:** there is one register on the way to the memory and one on
  the way back.

Addresses are `Ra + zero-extended offset`, in 32-bit words.

With `SMEM_WPORTS = 2`, the memory has a second write port:

- SP j stores through write port j mod 2.
- The sequencer issues a store to two neighbouring SPs per clock.
- A full-width store takes 8 clocks per wavefront instead of 16.

## Dot-product core

The core is optional (`DOT_EN`).

- **DOT:** sixteen FP32 multipliers take each SP's Ra and Rb. A 4-level
  pipelined adder tree sums them. SPs outside the instruction's width
  contribute 0.
- **SUM:** the multipliers are fed 1.0 instead of Rb.
- **INVSQR:** uses a separate unit:
  - the integer estimate `0x5F3759DF − (x >> 1)`;
  - then two Newton–Raphson steps;
  - relative error below 2·10⁻⁵ (not correctly rounded).

The tree and the invsqrt unit are balanced to the same latency. An output
mux and register then write the result into register Rd of the *same
wavefront* in SP0.

The core accepts one wavefront per clock, so DOT over 32 wavefronts gives 32
results in SP0 in 32 clocks. After that, SP0 can finish the reduction with
"SP0 only" instructions.

## Arithmetic details

- FP32 add and multiply round to nearest even.
- Subnormal inputs and results are flushed to zero.
- MAX/MIN and FP compares treat −0 as equal to +0.
- NaN and infinity are not given special treatment beyond what the exponent
  arithmetic produces.
- Integer MUL16/MUL24 use the low 16/24 bits of each operand.
- The HI forms return the full product shifted right by 16/24.

## Host interface (`egpu_top` ports)

The host ports may only be used while `running` is low:

| Ports | Behaviour |
|---|---|
| `imem_we`, `imem_waddr`, `imem_wdata` | write program words |
| `smem_we`, `smem_addr`, `smem_wdata` | write shared memory through its write port |
| `smem_re`, `smem_addr`, `smem_rdata` | read through read port 0; data appear 2 clocks after `smem_re` |
| `cfg_depth` | number of wavefronts in the thread block |
| `start` | one-clock pulse; the program runs from address 0 |
| `done` | rises at STOP |

Reset is synchronous and active high. It clears the sequencer, the pipeline
valid bits and the predicate stacks. Registers and memories are not cleared.

## Where this implementation departs from or goes beyond the original

The default is the original's baseline, the dual-port (DP) shared memory.
Its alternative quad-port (QP) organisation is available as
`SMEM_WPORTS = 2`: two write ports, so stores take half the clocks. The
original runs QP at a lower clock rate, which has no counterpart in RTL. The
original also offers the following, which are not implemented:

- 16-bit and reduced integer ALUs.
- The FP conditional instruction variants beyond the six compares above.
- The optional pipeline-depth parameters between the SPs and memory. The
  minimum depth of one register each way is fixed.

The original maps FP32 arithmetic onto hard DSP blocks. Here, the adder and
multiplier are plain logic.

The original does not specify the following, so they are choices made here:

- loop and call semantics, and the stack depths (4 each);
- fetch timing;
- how the block depth is configured;
- the exact pipeline stages;
- TDX/TDY meanings;
- LDI immediate extension;
- the invsqrt algorithm;
- which SP receives dot-core results (SP0);
- the host ports.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:

- compares against values computed independently (`tb/fp_ref_pkg.sv` is a
  reference FP32 model using `real`);
- prints `TB_RESULT checks=N failures=M`;
- has a watchdog.

Where a latency or rate is defined, the testbenches check it:

- `tb_sp` checks that a dependent instruction 8 clocks later sees the old
  value and one 9 clocks later sees the new value.
- `tb_sequencer` checks the issue sequence and clock count of each
  width/depth/LOD/STO combination.

`tb_egpu_top` runs the full-size SM (all parameters at their defaults). It
runs a program on 512-element FP32 vectors that exercises the following:

- loads, FP add, stores;
- IF/ELSE/ENDIF;
- DOT and SUM per wavefront;
- INVSQR;
- a width- and depth-restricted store;
- a subroutine called from a loop.

It checks every result word. It also checks that the total run time equals
the sum of the per-instruction clock counts above (2025 clocks). Each
mechanism is counted and must occur at least once.

`tb_egpu_small` runs the SM in a reduced configuration:

- 128 threads and 16 registers;
- a 16 KB shared memory with two write ports;
- no predicates and no dot core.

It checks a similar program there. Without predicates, IF/ELSE/ENDIF have no
effect.

Five more testbenches run complete workload programs on the full-size SM.
Each checks every output word and the exact run time. The clock counts they
print come from this implementation; the published counts are for the
original's own programs, which are not available:

| Testbench | Workload | Sizes | Clocks here | Published clocks |
|---|---|---|---|---|
| `tb_wl_transpose` | matrix transpose | 32², 64², 128² | 1763, 5603, 21158 | 1720, 5529, 20481 |
| `tb_wl_reduction` | vector reduction with the dot core (two SUM rounds) | 32, 64, 128 | 108, 130, 174 | 62, 94, 101 |
| `tb_wl_mmm` | 32×32 FP32 matrix multiply with DOT | 32² | 15074 | 19800 |
| `tb_wl_bitonic` | bitonic sort using predicates, JSR/RTS and loops | 32, 64, 128, 256 | 1895, 4074, 9256, 22373 | 1742, 3728, 8326, 16578 |
| `tb_wl_fft` | radix-2 complex FP32 FFT, one butterfly per thread, stage as subroutine | 32, 64, 128, 256 | 1023, 1831, 3551, 7297 | 876, 1695, 3463, 6813 |

Notes on the workload testbenches:

- The reduction program pads every dependency generously with NOPs, which
  accounts for most of its gap to the published counts.
- Matrix multiplies larger than 32×32 need more columns than there are
  wavefronts, so they are not run.
- The FFT results are compared with a double-precision DFT. The maximum
  error is below 5·10⁻⁶ for inputs in [-1, 1).

To simulate one testbench with Verilator, for example the top-level test:

```
verilator --binary --timing -Wno-fatal rtl/egpu_pkg.sv tb/fp_ref_pkg.sv \
  tb/egpu_asm_pkg.sv $(ls rtl/*.sv | grep -v egpu_pkg) tb/tb_egpu_top.sv \
  --top-module tb_egpu_top -o tb && ./obj_dir/tb
```

The packages must come before the files that import them. For a block
testbench, replace `tb_egpu_top` with its name. The full-size
top-level test builds and runs in well under a minute.
