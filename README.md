# Lagarto I: a scalar MIPS32 Release 6 pipeline in SystemVerilog

Lagarto I is a teaching and research core. It is small enough for a student
to follow one instruction through every stage. It still has the parts that
make a real pipeline hard to understand:

- a dynamic branch predictor with misprediction recovery;
- execution units with different latencies, running side by side;
- a complete bypass network between all of them;
- a two-level cache hierarchy.

This RTL is a working reconstruction of that core. It executes integer and
single-precision floating-point MIPS32 R6 programs. For example, it runs the
first term of the Chudnovsky series for pi and produces the float
`0x40490FDA`.

The design description fixes only some things:

- the five-stage organisation;
- the list of blocks;
- the number of execute stages of each unit;
- the use of MIPS32 R6.

Everything else is this implementation's choice, and each choice is a
parameter or is named below. Those choices include the predictor, the cache
organisation and sizes, the queue depth, the issue mechanism and the
floating-point subset.

## The pipeline

```
 fetch ─► fetch queue ─► decode ─► register read / issue ─► EX1 ─► ... ─► write-back
   │  ▲                                  (dispatch)          │
   │  └── branch predictor (BTB)                             ├─ integer ALU        1 stage   ─► INT
   │                                                          ├─ branch unit        1 stage   ─► INT (link)
   └── L1 I-cache                                             ├─ load/store         2 stages  ─► INT_LD / FP_LD
                                                              ├─ FP simple          1 stage   ─► FP
                                                              ├─ FP complex         4 stages  ─► FP2
                                                              └─ FP complex        12 stages  ─► FP3
```

**Fetch** (`fetch_unit`) fetches one instruction per cycle from the L1
instruction cache. In the same cycle it looks up the branch predictor. The
PC moves to the predicted target, or to PC+4 otherwise. The instruction is
pushed into the **fetch queue** (`fetch_queue`, 8 entries) together with its
PC and its prediction. The queue decouples fetch from the back end, so fetch
keeps running while the back end is stalled.

**Decode** (`decoder`) turns an instruction into a micro-op. A micro-op names:

- its unit and a unit-specific operation code;
- up to two source registers and one destination, each tagged integer or FP
  (a fused multiply-add also reads its destination);
- an immediate.

Compare-with-zero branches use register 0 as their second source, so the
branch unit only compares two registers.

**Register read / issue** (`dispatch_unit`) holds one micro-op. It decides
when the micro-op may go, then reads both register files and loads the
shared issue register, which is the input of EX1 for every unit. Issue is in
order, one micro-op per cycle.

**Execute and write-back.** Each unit ends in its own write-back register,
called a *port*. The six ports are INT, INT_LD, FP_LD, FP, FP2 and FP3. A
port holds its result for exactly one cycle. It writes the register file (6
write ports per file) and feeds the bypass network. Each register file has
three read ports; the third serves only the fused multiply-add. The integer
ALU and the branch unit share INT. Both have one stage and only one micro-op issues per
cycle, so they never collide.

### Issue timing: a countdown scoreboard

This is the part that makes the mixed latencies work. For each of the 64
architectural registers (32 integer, 32 FP), dispatch keeps a small counter.
The counter holds the number of cycles until the pending result for that
register appears on a write-back port.

- Issuing a producer of latency L sets its destination counter to L-1. All
  non-zero counters count down every cycle.
- A micro-op may issue when the counters of its sources are zero. It then
  reaches EX1 in exactly the cycle its producer's result is on a write-back
  port.
- The micro-op's destination counter must also be zero. This keeps two
  writes to one register in program order, so a 1-stage FP move cannot
  overtake an older 12-stage divide to the same register.

The resulting distances, counted from the producer's issue cycle to the
dependent micro-op's issue cycle:

| producer | stages | dependent may issue after |
|---|---|---|
| integer, branch link, FP simple | 1 | 1 cycle (back to back) |
| load (integer or FP) | 2 | 2 cycles |
| FP add/sub/mul/fused multiply-add/convert | 4 | 4 cycles |
| FP divide, square root | 12 | 12 cycles |

### The bypass network

Because of this timing, the bypass network (`bypass_network`) needs only one
comparison point: the operands entering EX1.

- For each operand (two, plus the addend of a fused multiply-add), it
  checks all six ports for a write to that register.
  When a port matches, the operand is taken from that port.
- Otherwise the operand is the value read at issue.
- One cycle later the result is in the register file. The register files
  return a value being written in the same cycle (write-through), which
  covers a consumer read in that cycle.

Every unit forwards to every other unit, across the integer and FP files.
For example, a load feeds an FP add, and an MFC1 feeds an integer add.

### Branches and misprediction

Only the Release 6 *compact* branches are implemented, and they have no
delay slot:

- BC and BALC;
- the two-register compare branches: BEQC, BNEC, BLTC, BGEC, BLTUC, BGEUC;
- the compare-with-zero forms;
- JIC and JIALC.

The branch unit resolves a branch in EX1 and compares the outcome with the
prediction made at fetch.

- If they differ, in the same cycle it:
  - redirects fetch to the correct PC;
  - flushes the fetch queue, the decode register and the issue stage.
- Older micro-ops already in execute units are unaffected, because they are
  older than the branch.
- Every resolved branch trains the predictor.
- A link value is written through the INT port one cycle later, like any
  one-stage result.

The predictor (`branch_predictor`) is a 64-entry direct-mapped branch target
buffer. Each entry has a tag, a target and a 2-bit saturating counter, and
predicts taken when the counter is 2 or 3.

- A taken branch that has no entry allocates one, with its counter at 2.
- Not-taken branches without an entry allocate nothing.

### Stalls

There are two stalls:

- **Dependence stall.** The micro-op in register read waits for its
  counters. Decode and fetch back up behind it.
- **Memory stall.** A load or store in its second stage that the L1 data
  cache has not answered freezes the whole back end: the issue stage,
  the scoreboard counters, and every execute and write-back register. The
  frozen results stay on their ports, so the bypass timing holds across the
  stall. This covers a read miss, and a store waiting for its write-through.

Fetch is not frozen by the memory stall. It fills the fetch queue until the
queue is full.

## Execution units

- **Integer ALU** (`int_alu`, 1 stage) executes:
  - add, subtract, logic, set-less-than, shifts (immediate and variable);
  - the R6 multiplies MUL/MUH/MULU/MUHU (a single-cycle 32x32 multiplier);
  - SELEQZ/SELNEZ, AUI/LUI, and MFC1.

  ADD and SUB behave like ADDU and SUBU (no overflow trap).
- **Load/store unit** (`lsu`, 2 stages). The first stage adds base and
  offset. The second stage accesses the L1 data cache. It supports byte,
  halfword and word loads, sign- or zero-extended, and stores with byte
  strobes, little-endian. LWC1/SWC1 move words between memory and the FP
  file. Addresses must be naturally aligned; a misaligned access is
  performed at the aligned address.
- **FP simple** (`fp_simple_unit`, 1 stage) executes MOV.S, ABS.S, NEG.S,
  MTC1 and the R6 compares CMP.AF/EQ/LT/LE.S. A compare writes all ones or
  all zeros to an FP register, as R6 specifies.
- **FP complex, 4 stages** (`fp_complex4_unit`) executes ADD.S, SUB.S,
  MUL.S, CVT.S.W, CVT.W.S and TRUNC.W.S. It also executes the fused
  multiply-adds MADDF.S (fd + fs·ft) and MSUBF.S (fd − fs·ft), which round
  only once. These are the only instructions with three sources: the old
  value of fd is read through a third read port of the FP register file and
  has its own bypass path.
- **FP complex, 12 stages** (`fp_complex12_unit`) executes DIV.S and SQRT.S.

The arithmetic lives in `lagarto_fp_pkg`:

- IEEE 754 single precision, round to nearest even.
- Subnormal inputs are read as zero, and subnormal results are flushed to
  signed zero.
- Every NaN result is the default quiet NaN `0x7FC00000`.
- No exception flags are kept.
- Each operation reduces its exact result to an integer significand with a
  sticky bit and an exponent, and one shared routine rounds and packs it.

The complex units compute in their first stage and then carry the result
through a delay line of registers. The result therefore appears after
exactly 4 or 12 stages. The internal split into real pipeline stages is left
to synthesis retiming, or to whoever replaces the functions with a
stage-by-stage datapath.

## Memory hierarchy

```
fetch ─► L1 I-cache ─┐
                     ├─► cache controller ─► L2 unified cache ─► mem_* port (main memory)
LSU   ─► L1 D-cache ─┘
```

All three caches are one module, `cache`: direct-mapped, write-through,
no-write-allocate, with 4-word lines.

- **Reads.** A read hit answers in the same cycle. A miss requests the
  whole line from the level below, writes it, and then hits.
- **Writes.** A write goes below at once, with byte strobes. It also updates
  the line if the line is present. It is answered when the level below
  answers.

| cache | sets x words | size | words returned upward |
|---|---|---|---|
| L1 I | 256 x 4 | 4 KiB | 1 |
| L1 D | 256 x 4 | 4 KiB | 1 |
| L2 | 1024 x 4 | 16 KiB | 4 (a whole line, for L1 refills) |

The **cache controller** (`cache_controller`) puts both L1 caches on the
single L2 port. The data side wins when both ask. The winner keeps the
port until the L2 answers, so a refill is never split.

The `mem_*` port of the top is the L2's lower side:

- a request is held until `mem_ready`;
- a read returns a whole line on `mem_rline`;
- a write carries one word and byte strobes.

A program is loaded by placing it in main memory behind this port. Caches
start empty after reset.

## Top-level interface (`lagarto_top`)

| parameter | default | meaning |
|---|---|---|
| `RESET_PC` | 0 | first fetch address |
| `L1I_SETS`, `L1D_SETS` | 256 | L1 sets (4-word lines) |
| `L2_SETS` | 1024 | L2 sets |
| `LINE_WORDS` | 4 | words per line in every cache |
| `BTB_ENTRIES` | 64 | branch target buffer entries |
| `IFQ_DEPTH` | 8 | fetch queue entries |

Ports:

- `clk` (rising edge) and `rst_n` (asynchronous, active low).
- The `mem_*` main-memory port described above.
- `wb[6]`, a copy of the six write-back ports, indexed by `WB_INT`,
  `WB_INT_LD`, `WB_FP_LD`, `WB_FP`, `WB_FP2` and `WB_FP3` from `lagarto_pkg`.
- `ev_*` event pulses for performance counting:
  - branch resolved, misprediction;
  - bypass used, dependence stall, memory stall;
  - L1 I, L1 D and L2 misses;
  - fetch queue full.

## Departures from the original design

- **Floating point is single precision only.** The original names a 64-bit
  fused multiply-add unit, and MIPS32 R6 has 64-bit FP registers with
  double-precision instructions. Here the FP registers are 32 bits wide,
  there is no .D arithmetic, the fused multiply-add is single precision,
  and subnormals are flushed.
- **Instruction subset.** The following are not decoded and execute as
  no-ops:
  - integer divide/modulo;
  - double-precision and paired-single operations;
  - traps, CP0, LL/SC and unaligned-access instructions;
  - branches with delay slots.
- **No exceptions.** There is no TLB, no exception handler and no CP0, and
  all addresses are physical.
- **No debug link.** The original board connects the core to a
  host-side debugger through a serial port. That link, its protocol and the
  clock and step control are not part of this RTL. The `wb` and `ev_*`
  outputs give a testbench the same view of the pipeline.
- **One decoder, one ALU.** The original block diagram shows several decode
  boxes and duplicated ALU and branch boxes. Since the core issues one
  instruction per cycle, one of each is built.
- **One cache-controller instance.** The block diagram has a controller on
  each L1-L2 path. Here one arbiter serves both.
- **Programs are loaded through main memory.** The original writes programs
  into the caches directly.

## Verification

Every block has a self-checking testbench in `tb/` named `<module>_tb`. Each
one compares against values computed in the testbench and checks the
latencies in cycles. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`. The floating-point testbenches compare
random operands against the simulator's `real` arithmetic, rounded to single
precision by `tb/fp_ref_pkg.sv`. Each testbench also has a watchdog.

`lagarto_top_tb` runs the whole core at its default parameters. Its program
is built with the encoder functions in `tb/mips_asm_pkg.sv` and loaded into
`tb/main_memory_model.sv`, a behavioural line-wide memory with a fixed
latency. The program:

1. computes 5! in a called routine (BALC, return with JIC);
2. computes 640320·sqrt(640320) / (12·13591409) in single precision and
   stores it;
3. raises 3 to the 4th power in a loop;
4. reads results back through LWC1/MFC1 and uses a loaded value at once;
5. runs a MADDF.S whose addend arrives over the bypass network;
6. sets a done flag.

The testbench checks the stored values. The pi value must equal
`0x40490FDA`. The testbench also requires each of these to have happened at
least once:

- a branch, a correctly predicted taken branch, and a misprediction;
- a bypass, a bypassed fused multiply-add addend, and a dependence stall;
- a memory stall;
- misses in L1 I, L1 D and L2;
- a full fetch queue;
- a write on each of the six write-back ports.

The run takes about 230 cycles.

`lagarto_chudnovsky_tb` runs a fuller version of the same workload, also at
the default parameters. Its main loop sums the terms k = 0 and k = 1 of the
Chudnovsky series:

    (-1)^k (6k)! (13591409 + 545140134 k) / ((3k)! (k!)^3 640320^(3k+3/2))

It calls a factorial routine and a power routine for each term, picks add or
subtract with a branch on the parity of k, and leaves pi = 1 / (12 · sum) in
`$f8`. The testbench repeats the same single-precision operations, in the
same order, and compares bit for bit. The result is `0x40490FDA`
(3.1415925), which is correct to six decimals; a single-precision float
cannot hold more. The run takes 455 cycles.

### Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/lagarto_pkg.sv rtl/lagarto_fp_pkg.sv tb/fp_ref_pkg.sv tb/mips_asm_pkg.sv \
  tb/lagarto_top_tb.sv --top-module lagarto_top_tb -o sim
./obj_dir/sim
```

`lagarto_chudnovsky_tb` is built the same way, with its name in place of
`lagarto_top_tb`. Other modules are found by name through `-Irtl -Itb`. A unit testbench is
built the same way, with its own name as the top module; `mips_asm_pkg` is
only needed by the top testbench. The simulator is two-state, and every
state element the design reads is reset.
