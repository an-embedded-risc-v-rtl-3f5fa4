# RV32EC core with a memory-to-memory Montgomery multiplication instruction

Public-key cryptography on small IoT processors spends most of its time in
modular multiplication of numbers much wider than a register. This design adds
a single custom instruction, **MMUL**, to a small 2-stage RV32EC core. One MMUL
computes a complete multi-word Montgomery product

    S = A * B * 2^-n  mod N        (n = operand width in bits)

with A, B and N read from memory and S written back to memory. The radix-2
algorithm needs only an adder and a shifter. A long instruction like this
normally makes the processor deaf to interrupts for hundreds of cycles. So
MMUL also has a **partial execution mode**: each MMUL instruction then handles
one bit of the multiplier and retires. Software issues n of them, for example
in an unrolled loop, and interrupts can be taken between any two of them.

The RTL follows the architecture described by Irmak and Yurdakul in "An
Embedded RISC-V Core with Fast Modular Multiplication": the R4-type encoding,
the R2MM algorithm with two cycles per iteration plus one subtraction cycle,
the way MMUL borrows the register file, ALU and load/store unit, the CSR that
selects the execution mode, and the per-call timing of partial execution. That
paper describes the base core only as an in-order 2-stage RV32EC pipeline. All
of its internals here (fetch queue, stage split, trap handling, memory
protocol) are this implementation's own, and so are the instruction's opcode
and field assignments. The section "What is taken from the paper, and what is
not" lists them.

## The MMUL instruction

### Encoding

MMUL uses the R4-type layout, the only standard format with three source
registers. Each operand can then sit at its own address, so the application
does not have to lay its data out in any particular way.

| bits  | 31:27 | 26:25    | 24:20 | 19:15 | 14:12    | 11:7 | 6:0                  |
|-------|-------|----------|-------|-------|----------|------|----------------------|
| field | rs3   | fnc2     | rs2   | rs1   | fnc3     | rd   | opcode               |
| MMUL  | N base| len[1:0] | B base| A base| len[4:2] | result base | `0001011` (custom-0) |

* `rs1`, `rs2`, `rs3` and `rd` are registers that hold **byte addresses**.
  They point to A, B, N and the result. No register is written.
* `len = {fnc3, fnc2}` is the operand length in 32-bit words minus one. The
  field can express 1..32 words (32..1024 bits). The hardware accepts
  `len < MAX_BITS/32`; a longer MMUL raises an illegal-instruction trap.
* Each operand is `len+1` consecutive little-endian words: the least
  significant word is at the base address.
* In GNU assembler syntax:
  `.insn r4 0x0b, len[4:2], len[1:0], rd, rs1, rs2, rs3`.

The result may overwrite A or B (`rd == rs1` is fine). All operands are read
before anything is written.

### Arithmetic contract

With n = 32 * (len+1), N must be odd and A, B < N. The result satisfies
S < N and S * 2^n = A * B (mod N). This is the Montgomery product with R = 2^n.
To use it for ordinary modular multiplication, keep values in the Montgomery
domain: enter with `MMUL(x, 2^(2n) mod N)`, leave with `MMUL(x, 1)`. The
hardware does not check the preconditions. An even N or an operand >= N gives
a meaningless result.

### Algorithm and datapath (`mmul_unit`)

R2MM (radix-2 Montgomery multiplication) with the accumulator S set to 0. For
each bit a_i of A, from i = 0 to n-1:

    cycle 1:  T = S + a_i * B
    cycle 2:  S = (T + T[0] * N) / 2          -- T + T[0]*N is even
    after the loop, one cycle:  if S >= N then S = S - N

Because S < 2N holds throughout, S and T need n+2 bits. The unit keeps A, B and
N in its own registers (3 x MAX_BITS flip-flops) and S and T in registers of
MAX_BITS+2 bits. Each iteration costs two carry-propagate additions of that
width.

MMUL has no memory port of its own. While it executes, it drives the core
datapath:

```
            reg_sel (rs1/rs2/rs3/rd)
  MMUL ───────────────────────────────► register file read port A
   │  offset                                   │ operand base address
   └───────────────► ALU (ADD) ◄───────────────┘
                       │ address
   write data ───────► LSU ──► data memory
   ◄──── read data ─── LSU
  CSR mmulcfg[0] ───► MMUL "execution mode select"
```

In the LOAD phase the unit issues one word read per cycle: A's words, then
B's, then N's, 3W reads in all for W = len+1. Read data comes back one cycle
later and goes into the operand registers. The last word (of N) arrives during
the first iteration cycle, which does not use N yet, so loading costs exactly
3W cycles. In the STORE phase it writes one result word per cycle from
`rd + 4*k`.

### Timing

The count is the number of cycles the instruction spends in the execute stage.
These counts are checked cycle-exactly by the testbenches.

| mode | call | cycles | contents |
|------|------|--------|----------|
| atomic | the only one | 3W + 2n + 1 + W | loads, n iterations, subtraction, stores |
| partial | 1st | 3W + 2 | loads + iteration 0 |
| partial | 2nd ... (n-1)th | 2 | one iteration |
| partial | nth | W + 3 | last iteration, subtraction, stores |

For the default 128-bit build (W = 4, n = 128), an atomic MMUL takes 273
cycles. In partial mode, an interrupt waits for at most 14 cycles (the first
call) plus the cycle in which it is recognised.

### Using partial execution

Partial mode is bit 0 of the custom CSR `mmulcfg` (address 0x7C0):

```
    csrwi  0x7C0, 1          # partial execution on
    li     t2, 128           # n calls for a 128-bit product
1:  .insn r4 0x0b, 0, 3, a3, a0, a1, a2    # MMUL, 4 words
    addi   t2, t2, -1
    bnez   t2, 1b            # (or unroll the loop)
    csrwi  0x7C0, 0
```

The unit remembers between calls how far the multiplication has progressed
(`active`, iteration counter, operands, S). The first call of a
multiplication loads the operands. The n-th call stores the result and clears
`active`. Software has to issue exactly n calls with the same registers and
length. It must not start another MMUL before those calls are done, which
includes MMULs in an interrupt handler. An atomic MMUL issued while a partial
multiplication is active finishes the remaining iterations and stores the
result.

## The base core (`mmul_core`)

`mmul_core` is the top level. It has two stages:

1. **Fetch** (`fetch_stage` + `rvc_expander`). Aligned 32-bit words are read
   from the instruction memory and split into halfwords in a 6-entry queue. A
   32-bit instruction may start at any halfword, so it may span two words. The
   head of the queue is offered to stage 2; a compressed instruction is first
   expanded to its 32-bit equivalent. The next word is requested whenever the
   queue holds at most four halfwords, counting the word arriving this cycle.
   This sustains one 32-bit instruction per cycle and never overflows the
   queue. Fetching goes on while stage 2 stalls until the queue is full, so
   during a long MMUL the following instructions are already waiting.
2. **Execute** (`decoder`, `regfile`, `alu`, `lsu`, `csr_unit`,
   `mmul_unit`). This stage decodes, reads registers, executes, accesses
   memory and writes back one instruction. Most instructions take 1 cycle.
   Loads take 2: the request, then the data from the 1-cycle memory. MMUL
   stays as long as the table above says.

A taken branch, a jump, a trap or `mret` redirects the fetch stage, and the
target word is requested in the same cycle. The cost is one bubble, or two if
the target is a 32-bit instruction in the upper half of a word. There is no
branch prediction. Nothing is forwarded, and nothing needs to be: register
reads and write-back happen in the same stage.

ISA: RV32E (16 registers; any encoding that names x16..x31 is illegal) with
the C and Zicsr extensions. FENCE and WFI execute as no-ops. There are no
counters (`mcycle` and similar).

### Traps and interrupts (`csr_unit`)

Machine mode only, with the minimum needed to take an interrupt:

* CSRs: `mstatus` (MIE, MPIE), `mie` (MEIE), `mip` (MEIP), `mtvec` (direct
  mode), `mscratch`, `mepc`, `mcause`, plus `mmulcfg`. Unknown CSRs read as
  zero.
* One level-sensitive external interrupt, `irq_i`. It is taken only *between*
  instructions, never inside one. This is what makes partial execution
  matter: an atomic MMUL holds the interrupt off until it completes.
* Illegal instruction (this includes an MMUL longer than the hardware
  supports), ECALL and EBREAK trap with `mepc` pointing at the faulting
  instruction.

### Memory interface

The core has two memory ports. Neither has wait states, and each returns read
data on the cycle after the request:

| port | signals | notes |
|------|---------|-------|
| instruction | `imem_req`, `imem_addr` (word aligned), `imem_rdata` | read only |
| data | `dmem_req`, `dmem_we`, `dmem_be[3:0]`, `dmem_addr` (word aligned), `dmem_wdata`, `dmem_rdata` | byte enables for SB/SH |

The testbenches connect both ports to one dual-port array (`tb/sim_mem.sv`).
Misaligned loads and stores are not supported; an assertion in `lsu` flags
them.

## Parameters and sizes

| parameter | module | default | meaning |
|-----------|--------|---------|---------|
| `MAX_BITS` | `mmul_core`, `mmul_unit` | 128 | widest MMUL operand, a multiple of 32, at most 1024 |
| `BOOT_ADDR` | `mmul_core`, `fetch_stage` | 0 | first instruction fetched after reset |

The 128-bit default is the configuration the paper synthesises. It holds the
FourQ field (p = 2^127 - 1, 4 words), and with it the ARIS scheme built on
FourQ. NIST P-256 and Curve25519 need 8-word operands, so the core must be
built with `MAX_BITS = 256`. Register count grows linearly with `MAX_BITS`
(about 5 x MAX_BITS flip-flops in `mmul_unit`), and so does the width of the
two adders. The default core has about 1,500 flip-flops.

## Files

| file | contents |
|------|----------|
| `rtl/rv_pkg.sv` | opcodes, CSR numbers, ALU/branch/CSR enums, decoded-instruction struct |
| `rtl/mmul_core.sv` | top level: pipeline control, datapath muxes, MMUL coupling |
| `rtl/fetch_stage.sv` | instruction fetch and halfword queue |
| `rtl/rvc_expander.sv` | compressed-instruction expansion |
| `rtl/decoder.sv` | RV32E/Zicsr/MMUL decoder |
| `rtl/regfile.sv` | 16 x 32 register file |
| `rtl/alu.sv` | ALU and comparisons |
| `rtl/lsu.sv` | load/store unit |
| `rtl/csr_unit.sv` | CSRs, trap entry, execution-mode bit |
| `rtl/mmul_unit.sv` | R2MM MMUL unit |
| `tb/rv_asm_pkg.sv` | small assembler (instruction encoders) used by the tests |
| `tb/sim_mem.sv` | behavioural single-cycle memory |
| `tb/tb_*.sv` | self-checking testbenches, one per module |
| `tb/tb_mmul_workloads.sv` | field-size workloads (FourQ, P-256, Curve25519) at `MAX_BITS = 256` |
| `tb/tb_fourq_gfp2_mul.sv` | a FourQ GF(p^2) multiplication written as a program for the core |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. For example,
with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/rv_pkg.sv tb/rv_asm_pkg.sv rtl/*.sv tb/sim_mem.sv tb/tb_mmul_core.sv \
  --top-module tb_mmul_core
./obj_dir/Vtb_mmul_core
```

Swap in another `tb/tb_<name>.sv` and `--top-module tb_<name>` for the other
tests. Listing all of `rtl/*.sv` is harmless, but the package files must come
first. Verilator has only two states, so every register is reset or
initialised. Running with `+verilator+rand+reset+2` gives uninitialised
variables random values, and the tests pass under that setting.

What the tests establish:

* `tb_mmul_core` runs the whole core at its default parameters. A program
  assembled in the testbench exercises compressed instructions, 32-bit
  instructions on halfword boundaries, every load/store size, taken branches,
  ECALL and an over-long MMUL (both trap and resume), an atomic 128-bit MMUL,
  an atomic 32-bit MMUL and a 128-call partial MMUL. Meanwhile the testbench
  raises interrupts. The one raised inside the atomic MMUL must wait for the
  MMUL to retire. Those raised during the partial sequence must be taken
  between calls within 17 cycles. Results are checked against
  `S*2^n = A*B mod N`, computed independently with wide arithmetic, and every
  MMUL call's cycle count against the timing table above. It also counts the
  instruction fetches made while an atomic MMUL runs. There may be at most
  four, and with a single-cycle memory there are none, because the fetch
  queue is already full.
* `tb_mmul_workloads` builds the core with `MAX_BITS = 256`. It runs chains of
  squarings modulo the FourQ, P-256 and Curve25519 primes, atomically and in
  partial mode.
* `tb_fourq_gfp2_mul` runs, at the default parameters, a program that
  multiplies two elements of GF(p^2) with p = 2^127 - 1, as the FourQ curve
  does: four 128-bit MMULs (schoolbook) plus a modular addition and a
  modular subtraction done with ordinary RV32E instructions. It runs the program once
  with atomic MMULs and once in partial mode with each MMUL unrolled into 128
  calls, checks both results against a wide-arithmetic reference, and checks
  that the two versions take the same number of cycles (about 1,250) to within 1%. This is
  the cost model the partial mode is designed for: interruptibility without
  extra cycles, as long as the calls are unrolled.
* `tb_mmul_unit` tests the MMUL unit alone for 1 to 4 words, in both modes,
  with random operands and exact cycle counts.
* The remaining testbenches check each pipeline block against encodings or
  reference models written independently in the testbench.

## What is taken from the paper, and what is not

From the paper:
* the core is 2-stage and in-order, and the ISA is RV32EC;
* MMUL works on memory operands;
* the R4-type encoding with rs1/rs2/rs3 as the base addresses of A/B/N;
* the length is encoded in words in the five fnc3/fnc2 bits;
* the maximum length is fixed at synthesis (128 bits by default);
* R2MM with 2 cycles per iteration and 1 subtraction cycle;
* 3W loads and W stores, with the operands held inside the unit;
* addresses are formed in the core's ALU as base register + MMUL offset;
* the LSU is driven by MMUL;
* a CSR bit selects the execution mode;
* in partial mode, each call processes one bit; the first call loads and the
  last stores, taking 3W+2, 2 and W+3 cycles.

Choices of this implementation, where the paper gives no detail:
* the custom-0 opcode, the bit order of the length field and its "words minus
  one" offset;
* the use of `rd` as the result address (the paper only says there is one);
* CSR number 0x7C0;
* the whole fetch stage, including the compressed-instruction handling;
* the execute-stage organisation, and a single register read port shared with
  MMUL;
* the trap/interrupt scheme and the memory port protocol;
* the split of an iteration into its two cycles, and the overlap of the last
  load with the first iteration;
* rejecting over-long MMULs as illegal, and letting an atomic call finish a
  partial multiplication that is already under way.

One point departs from the text. The paper defines MMUL as A*B*R^-1 mod N
with R = 2^(2n) mod N. R2MM with n iterations produces A*B*2^-n mod N, and
that is what this hardware computes. The value 2^(2n) mod N is the constant
that converts operands into that Montgomery domain.

Not covered: timing/area closure (nothing here has been through
place-and-route), power, and the paper's Coremark, Dhrystone and
elliptic-curve benchmark programs. Of the curve code, only the field sizes
and one GF(p^2) multiplication for FourQ are exercised.
