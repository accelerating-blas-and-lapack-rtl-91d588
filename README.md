# A double-precision processing element for BLAS and LAPACK with tunable floating-point pipelines

Dense linear algebra spends almost all its time in four floating-point
operations: multiply, add, divide and square root. How deep each of these
pipelines should be depends on the workload. A deeper pipe runs at a higher
clock, but every result that the next instruction needs stalls the machine
for longer. Inner products and matrix products expose many independent
multiplies and long chains of dependent adds. The panel steps of QR and LU
factorisations issue few divides and square roots, and nearly every one of
them is waited on.

This RTL implements the processing element (PE) built to study that
trade-off, as described in "Accelerating BLAS and LAPACK via Efficient
Floating Point Architecture Design" (Merchant, Chattopadhyay, Raha, Nandy,
Narayan). The design has two parts:

* The **PE** does the arithmetic. It has one pipeline each for FMUL, FADD,
  FDIV and FSQRT, and a DOT4 datapath of four multipliers and three adders.
  The depth of every pipe is a parameter.
* The **auxiliary PE (APE)** does all data movement. It moves data between
  the memory hierarchy, a 16 KB dual-ported local memory, and the PE's
  register file.

The PE has no memory instructions of its own. The APE has no arithmetic.
The paper gives the block structure, the five-step flow of data, the
double-precision format, the 16 KB dual-ported local memory and the DOT4
instruction built from 4 multipliers and 3 adders. Everything else is this
implementation's own choice: the instruction sets, the hazard logic, the
number formats at the edges, the interface protocols and all sizes except
the local memory. Those choices are marked as such below and in each file's
header.

## Block structure

```
            APE                                              PE
 +--------------------------------------------+   +-------------------------------------+
 | global imem -> ape_global_ctrl              |   | imem -> pe_decoder -> issue logic    |
 |   (256x64)        |  port A                 |   | (256x32)              | scoreboard   |
 | memory  <---------+-------> local_mem       |   |                       v              |
 | hierarchy  ext_*          (2048 x 64 bit)   |   |   fp_arith_unit: fmul fadd fdiv      |
 |                            |  port B        |   |                  fsqrt dot4          |
 | local imem -> ape_local_ctrl ---------------+---+-> regfile (32 x 64) <-- write-back   |
 |   (256x32)      pe_start / pe_done ---------+---+-> start / done                       |
 +--------------------------------------------+   +-------------------------------------+
```

| File | Block |
|---|---|
| `rtl/lapack_pe_top.sv` | the whole design: APE plus PE |
| `rtl/ape.sv` | APE: both instruction memories, both sequencers, the local memory |
| `rtl/ape_global_ctrl.sv` | decoder and sequencer for the global program (memory hierarchy to and from the local memory) |
| `rtl/ape_local_ctrl.sv` | decoder and sequencer for the local program (local memory to and from the registers; starts the PE) |
| `rtl/local_mem.sv` | 16 KB dual-port local memory |
| `rtl/imem.sv` | instruction memory, used three times |
| `rtl/pe_core.sv` | PE: fetch, decode, hazard checks, issue, write-back, counters |
| `rtl/pe_decoder.sv` | PE instruction decoder |
| `rtl/regfile.sv` | 32-entry register file, 9 read ports, 2 write ports |
| `rtl/fp_arith_unit.sv` | the five arithmetic pipes and the merged write-back |
| `rtl/fmul.sv`, `fadd.sv`, `fdiv.sv`, `fsqrt.sv` | binary64 pipes |
| `rtl/dot4.sv` | 4-multiplier, 3-adder inner-product tree |
| `rtl/pipe_delay.sv` | register chain that sets a pipe's depth |
| `rtl/fp_pkg.sv` | binary64 unpacking and round-to-nearest-even packing |
| `rtl/pe_pkg.sv` | instruction encodings, issue and counter structs, sizes |

## How a computation flows: three programs in a chain

The paper runs every kernel in five steps:

1. memory hierarchy → local memory
2. local memory → register file
3. compute in the PE
4. register file → local memory
5. local memory → memory hierarchy

Here each step is one instruction of one of three programs, and each program
can start the next one down and wait for it:

* The **global program** runs from address 0 of the global instruction memory
  when `start` is pulsed. It does steps 1 and 5, and starts the local program
  with `RUNLOCAL`. `HALT` pulses `done` at the top.
* The **local program** does steps 2 and 4, one word per instruction, and
  starts the PE with `RUNPE`. `END` hands control back to the global
  program.
* The **PE program** does step 3. `HALT` waits until every result is in the
  register file, then hands control back.

Only one of the three runs at any time. So the register file is never written
by the APE and the PE in the same cycle, and the local memory's two ports are
never busy together. Assertions check the first of these. The paper does not
say how the APE and the PE synchronise; this start/done chain is the simplest
way that keeps the five steps in order.

None of the instruction sets has a branch. The programs are straight-line.
To run a kernel longer than the 256-word instruction memories, the host loads
the next batch of instructions and pulses `start` again. The local memory and
the registers keep their contents between runs. The 1000-element inner
product in the testbench is run this way.

### Instruction encodings (this design's own)

PE, 32 bits: `[31:28] op, [27:23] rd, [22:18] rs1, [17:13] rs2`

| op | name | effect | pipe, latency |
|---|---|---|---|
| 0 | NOP | none (takes one issue cycle) | – |
| 1 | FADD | rd = rs1 + rs2 | adder, ADD_STAGES |
| 2 | FSUB | rd = rs1 − rs2 | adder, ADD_STAGES |
| 3 | FMUL | rd = rs1 × rs2 | multiplier, MUL_STAGES |
| 4 | FDIV | rd = rs1 / rs2 | divider, DIV_STAGES |
| 5 | FSQRT | rd = √rs1 | square root, SQRT_STAGES |
| 6 | DOT4 | rd = (r[rs1]·r[rs2] + r[rs1+1]·r[rs2+1]) + (r[rs1+2]·r[rs2+2] + r[rs1+3]·r[rs2+3]) | DOT4, MUL_STAGES + 2·ADD_STAGES |
| 15 | HALT | wait until all results are written, then return | – |

Other opcodes do nothing. In DOT4 the register numbers wrap around modulo 32.

APE local, 32 bits: `[31:28] op, [27:23] reg, [10:0] LM address or [7:0] PE start pc`

| op | name | effect | cycles |
|---|---|---|---|
| 1 | LDRF | r[reg] = LM[addr] | 2 |
| 2 | STRF | LM[addr] = r[reg] | 1 |
| 3 | RUNPE | start the PE at pc, wait for it | PE run + 1 |
| 15 | END | return to the global program | 1 |

APE global, 64 bits: `[63:60] op, [59:49] LM address, [48:37] count, [31:0] external word address or [7:0] local pc`

| op | name | effect |
|---|---|---|
| 1 | LDLM | LM[lm+k] = EXT[ext+k] for k < count |
| 2 | STLM | EXT[ext+k] = LM[lm+k] for k < count |
| 3 | RUNLOCAL | start the local program at pc, wait for it |
| 15 | HALT | pulse `done` |

`pe_pkg` has the functions `pe_instr`, `loc_instr` and `glb_instr`, which
assemble these instruction words.

## The PE pipeline and its hazards

This is the part of the design that the pipeline-depth study is about.

**Fetch.** The instruction memory reads synchronously. It is addressed with
the *next* pc: pc+1 when the current instruction leaves issue, otherwise pc.
So the current instruction is always on its output. A PE run therefore needs
no fetch bubble, and it can issue one instruction per cycle from the cycle
after `start`.

**Issue.** The PE is scalar and in order. Operands are read from the
register file in the issue cycle; DOT4 reads all eight in that cycle. There
is no forwarding. Two hazard checks hold an instruction at issue:

* **Dependency (RAW/WAW).** A scoreboard has one busy bit per register whose
  result is still in a pipe. An instruction waits while any register it reads
  is busy, or while its destination is busy. For DOT4 it reads
  rs1..rs1+3 and rs2..rs2+3. A consumer issues in the cycle after its
  producer's write-back. A dependent pair such as `FMUL r3; FADD r4,r3,…`
  therefore loses MUL_STAGES cycles. These are the stalls that make a deep
  pipe lose on dependent code.
* **Write-back slot.** The pipes have different depths but share one
  register-file write port. A shift register `wbres_q` records which future
  cycles already have a write-back. Bit k means a write-back k cycles from
  now. An instruction with latency L waits while bit L is set. Example: a
  DOT4 at cycle t (latency 12 at the defaults) and an FMUL at t+8
  (latency 4) would both finish at t+12, so the FMUL waits one cycle.

Once every instruction is issued, a HALT waits until the scoreboard and the
reservations are empty. It then pulses `done`.

**Timing at a glance.** A run of `FMUL r3,r1,r2; FADD r4,r3,r1; HALT` takes
MUL_STAGES + ADD_STAGES + 3 cycles from the cycle after `start` to the
`done` pulse. It includes MUL_STAGES dependency-stall cycles. `pe_core_tb`
checks this exact count.

**Counters.** `perf` reports four counts for the last PE run: cycles,
arithmetic instructions issued, dependency-stall cycles and write-back-stall
cycles. Cycles divided by instructions gives the CPI that the paper plots
against pipe depth. The counters clear at each PE `start`.

## What depth costs: CPI against pipe depth

`depth_sweep_tb` builds ten PEs:
* five with multiplier and adder at 1, 2, 4, 8 and 16 stages (divider and
  square root at 4);
* five with divider and square root at those depths (multiplier and adder at
  4).

It runs three small register-resident kernels on all ten. The cycles per
issued instruction came out as follows:

| kernel | pipes varied | 1 | 2 | 4 | 8 | 16 |
|---|---|---|---|---|---|---|
| 3×3 matrix product, scalar FMUL/FADD | FMUL, FADD | 1.24 | 1.67 | 2.51 | 4.20 | 7.58 |
| | FDIV, FSQRT | 2.51 | 2.51 | 2.51 | 2.51 | 2.51 |
| 4×4 LU, no pivoting | FMUL, FADD | 2.18 | 2.62 | 3.50 | 5.26 | 8.79 |
| | FDIV, FSQRT | 2.97 | 3.15 | 3.50 | 4.21 | 5.62 |
| 8-element column scaling (QR) | FMUL, FADD | 1.46 | 1.58 | 1.88 | 2.54 | 3.88 |
| | FDIV, FSQRT | 1.62 | 1.71 | 1.88 | 2.21 | 2.88 |

The CPI growth is the cost side of the trade-off. Set against the shorter
cycle of a deeper pipe, it gives a time-per-instruction minimum at a
moderate depth. The depth of the pipes a kernel does not use changes
nothing; the matrix product's FDIV/FSQRT row shows this.

The numbers here are plain cycles per instruction, so they can only grow
with depth. The paper's simulated curves for 100×100 matrices are also
labelled CPI, but they first fall and then rise, with their lowest point
between about 6 and 14 adder/multiplier stages. That quantity must therefore
include the shorter cycle of a deeper pipe, which RTL simulation does not
model.

These kernels are far smaller than the 100×100 factorisations studied in
the paper. They have less independent work to hide latency behind, so their
CPI rises faster with depth.

## Floating-point pipes

All arithmetic is IEEE-754 binary64.

**Algorithms.** Each pipe computes its result in one block of logic. It then
carries the result, with the destination register as a tag, through a chain
of STAGES registers (`pipe_delay`). So latency equals STAGES and throughput is
one operation per cycle at any depth. The paper says the depths were
"kept variable", and its own simulator likewise placed registers around
arithmetic written in C. A synthesis flow is expected to retime the
registers into the logic. The algorithms (this design's choice):

* **FMUL:** 53×53-bit significand product, normalised by one position.
* **FADD/FSUB:** swap so the larger magnitude comes first, align with guard,
  round and sticky bits, add or subtract, then renormalise (one place right,
  or left by the leading-zero count).
* **FDIV:** restoring radix-2 division, 57 quotient bits, unrolled.
* **FSQRT:** digit-by-digit square root of the significand. When the
  exponent is odd the significand is first doubled. 56 root bits, unrolled.

All four pipes round to nearest even. Each folds any remainder into the
sticky bit.

**Number-format choices.** These are this design's own; the paper says only
"double precision":

* Subnormal inputs are read as zero, and subnormal results are flushed to a
  signed zero.
* Overflow gives a signed infinity.
* Every invalid operation gives the quiet NaN `0x7FF8000000000000`. The
  invalid operations are NaN operands, ∞−∞, 0×∞, 0/0, ∞/∞ and √ of a
  negative number.
* An exact zero sum is +0; it is −0 only when both operands are −0.
* No exception flags are produced.

Within those rules every result is bit-exact with IEEE-754. The testbenches
compare against the simulator's own double-precision arithmetic.

**DOT4** follows the inner-product graph of the paper:

* level 1: four products;
* level 2: the sums of pairs 0+1 and 2+3;
* level 3: the sum of those two sums.

The datapath uses its own four `fmul` and three `fadd` pipes, next to the
scalar ones. The paper attaches the multipliers and adders "in a
reconfigurable way" but does not say what the other configurations are, so
only the DOT4 configuration is built.

## Memory-hierarchy port

`ext_req`, `ext_we`, `ext_addr` (32-bit word address) and `ext_wdata` form a
request. The request is held, unchanged, until `ext_gnt` is high in the same
cycle; an assertion checks this. Read data return later, in request order,
with `ext_rvalid` and `ext_rdata`. The global sequencer keeps one request
outstanding at a time. A read costs the grant wait plus the read latency. A
write costs one local-memory read cycle plus the grant wait. The paper treats
the memory hierarchy as outside the design and gives no protocol, so this
one is this design's choice. `tb/ext_mem_model.sv` is a behavioural memory
with random grant delays and read latencies.

Program loading: `prog_we`, `prog_sel` (0 global, 1 local, 2 PE),
`prog_addr` and `prog_wdata`. Global words use all 64 bits; the others use
the low 32.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `MUL_STAGES`, `ADD_STAGES`, `DIV_STAGES`, `SQRT_STAGES` (top, `pe_core`, `fp_arith_unit`; `STAGES` in each pipe) | 4 | The paper makes the depths variable but prints no chosen value. 4 is the optimum its theory gives for small hazard fractions; its CPI plots put the simulated optimum of the adder and multiplier somewhat deeper. Any value ≥ 1 works. |
| `LM_DEPTH` | 2048 × 64 bit | 16 KB dual-ported SRAM, from the paper |
| `NREGS` (`pe_pkg`) | 32 | "a small register file"; the size is this design's choice |
| instruction memories | 256 words each | this design's choice |

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog.

| Testbench | What it checks |
|---|---|
| `fmul_tb`, `fadd_tb`, `fdiv_tb`, `fsqrt_tb` | 3000 random and special operands per unit, bit-exact against double arithmetic; tag and exact latency |
| `dot4_tb` | random vectors; summation order; latency MUL+2·ADD |
| `fp_arith_unit_tb` | random mix of all pipes at distinct depths; each write-back's value, register and cycle |
| `regfile_tb`, `imem_tb`, `local_mem_tb`, `pe_decoder_tb` | against reference arrays and tables, including write clashes and read latency |
| `pe_core_tb` | exact cycle and stall counts of a dependent pair; one forced write-back stall; six random 200-instruction programs against a sequential model |
| `ape_local_ctrl_tb`, `ape_global_ctrl_tb` | directed and 20 random programs each, every LM, register and memory word against a sequential model; start addresses, 2-cycle loads and 1-cycle stores, grant waits, `done` pulses |
| `ape_tb` | the APE alone: program loading, a complete global/local/PE chain with a PE stand-in |
| `lapack_pe_top_tb` | the whole design at default parameters: see below |
| `depth_sweep_tb` | ten PEs at different pipe depths running the same kernels: results against a model, and CPI against depth (next section) |

`lapack_pe_top_tb` runs five kernels through all five steps. It checks
every output word bit-exactly:

* **DGEMM:** C = A·B for 4×4 matrices, one DOT4 per element.
* **DDOT:** the inner product of two 1000-element vectors. Both vectors sit
  in the local memory at once, using 2000 of its 2048 words; the kernel is
  250 DOT4+FADD steps in ten program batches.
* **QR step:** the scaling of a QR panel column: x/‖x‖₂ for 8 elements,
  using DOT4, FADD, FSQRT and FDIV.
* **LU:** a 4×4 LU factorisation without pivoting.
* **DGEMM 100×100:** the full-size matrix product. A, B and C take
  240,000 bytes, so they stay in the external memory and are streamed.
  For each element of C:
  * one row of A and one column of B go into the local memory;
  * a fixed 227-word local program runs 25 steps of eight LDRF and one RUNPE
    (DOT4, then FADD into the sum);
  * the result goes back out.

  The host reloads the global program 200 times. All 10,000 elements are
  checked. The run takes about 14.6 million cycles. The PE is busy 9.6 cycles
  per instruction, because each PE run is one dependent DOT4/FADD pair. So
  this kernel is bound by the APE's data movement and the pipe latencies, not
  by issue.

It also counts each mechanism and fails if one never happens: issues to every
pipe, FSUB, dependency stalls, write-back stalls, memory grant waits, PE runs
and local-program runs.

To run one testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fp_pkg.sv rtl/pe_pkg.sv tb/tb_fp_pkg.sv tb/ext_mem_model.sv rtl/*.sv \
  tb/lapack_pe_top_tb.sv --top-module lapack_pe_top_tb -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace the testbench file and top module for the others. The block
testbenches finish in well under a second. The end-to-end run takes about
half a minute, almost all of it in the 100×100 matrix product.

## What fits, and what does not

* **DDOT.** The paper's 1000-element inner product fits in the local memory
  whole.
* **100×100 kernels.** These are the paper's DGEMM, QR and LU simulations. A
  100×100 matrix is 80,000 bytes, five times the local memory. Such kernels
  run as blocks streamed through the global program. Since no program has a
  branch, the host must also reload the instruction memories many times. The
  DGEMM is run this way in full, as described above. QR and LU are
  exercised only through their kernels (the column scaling, and a 4×4
  factorisation).
* **LU with partial pivoting.** This cannot be expressed at all: the PE's
  operations are multiply, add/subtract, divide, square root and DOT4, and
  none of them compares two numbers to choose a pivot.
* **Frequency, area and power.** The paper's synthesis results at 0.20 to
  1.81 GHz depend on a technology library and an SRAM macro. This RTL does
  not reproduce them.

## Departures and limits

* The instruction formats, the program chaining, the scoreboard, the
  write-back reservation, the register-file and instruction-memory sizes,
  the memory port and the subnormal/NaN handling are all this design's own.
  They are not taken from the paper.
* The pipes compute in one block and delay the result through registers.
  Before this runs at a high clock, the registers have to be retimed into
  the logic, or the arithmetic has to be staged by hand.
* FSUB is added; the paper lists only an adder. LU and QR need subtraction.
* `dot4` has its own multipliers and adders. How the paper's
  "reconfigurable" sharing with the scalar units would work is not
  described, so it is not built.
* The local memory is an array with SRAM-like timing (one-cycle synchronous
  read on both ports), not a macro.
