# A six-stage in-order RV64IMC application-class core

This is a synthesizable SystemVerilog model of a 64-bit, single-issue,
in-order RISC-V core that can boot an operating system. It supports RV64IMC,
the machine, supervisor and user privilege levels, SV39 virtual memory with
hardware page-table walks, precise exceptions and interrupts, and
execution-based debug. The core talks to the outside world through a
single 64-bit AXI master port and four interrupt lines. The sizes follow
the taped-out configuration of the Ariane core:

| Parameter | Value |
|---|---|
| BHT | 8 entries, 2-bit counters |
| BTB | 8 entries |
| ROB / scoreboard | 8 entries |
| Fetch latency | 1 cycle |
| I$ | 16 KiB, 4-way |
| D$ | 32 KiB, 8-way, 3-cycle load latency |
| ALU latency | 1 cycle |
| Register file | 31x64 flip-flops |
| ITLB / DTLB | 16 entries each, fully associative, pseudo-LRU |

The top module is `ariane` (`rtl/ariane.sv`). All shared types are in
`rtl/ariane_pkg.sv`.

## Pipeline overview

```
 PC gen ─► IF (I$ + ITLB) ─► [instr queue] ─► ID ─► Issue ─► EX ─► Commit
   ▲   BHT/BTB/RAS    │                      realign   scoreboard   ALU   CSR file
   │                  │                      RVC exp.  rename       branch  traps
   └──── mispredict / trap / xRET / refetch ─── regfile  mul/div  debug
                                                         CSR buf
                                                         LSU ─ store buffer ─ D$
              MMU (ITLB, DTLB, PTW) ──────── D$ port 0 ───────────┘
              I$ ─┐
              D$ ─┴─ AXI arbiter ─► one AXI master
```

1. **PC generation and fetch** (`frontend`, `icache`, `instr_scan`, `bht`,
   `btb`, `ras`, `instr_queue`). The frontend picks the next PC. Its sources,
   highest priority first:
   - the trap vector;
   - the xRET return address;
   - the refetch PC after a flush;
   - a branch-unit correction;
   - its own prediction;
   - PC+4.

   Each fetch is an aligned 32-bit word. The I$ reads its arrays in the
   request cycle and compares tags in the next one. Its output is then
   registered, as the paper describes, before being pre-decoded.
2. **Decode** (`id_stage`, `realigner`, `compressed_decoder`, `decoder`).
   This stage splits fetch words into instructions and expands RVC. It then
   decodes each instruction into a scoreboard entry. That entry carries the
   functional unit, the operation, the 6-bit renamed register names and any
   exception.
3. **Issue** (`issue_stage`, `scoreboard`, `regfile`). The issue stage does
   renaming and hazard checks, then reads operands from the register file or
   forwards them.
4. **Execute** (`ex_stage`, `alu`, `branch_unit`, `mult`, `multiplier`,
   `serdiv`, `csr_buffer`, `lsu`, `store_buffer`). Results come back on three
   write-back buses:
   - ALU, branch link or CSR;
   - multiply/divide;
   - load/store.
5. **Commit** (`commit_stage`, `csr_regfile`, `perf_counters`, `controller`).
   This stage retires in order, up to two instructions per cycle. It handles
   every side effect that must not be speculative.

Shared by several stages:
- `mmu` holds the ITLB, the DTLB, the `ptw` walker and the permission checks.
- `dcache` is the data cache.
- `axi_arbiter` puts both caches on the one port.

## The hard parts

### Fetch, prediction and re-alignment

The I$ output register costs one cycle on every taken prediction, and
prediction happens one stage after the data arrives. So a taken branch
squashes exactly the one request in flight. Compressed code makes up for
this. A 32-bit fetch word holds 1.5 instructions on average, which keeps the
instruction queue fed.

`instr_scan` pre-decodes both half-words of a fetch word, looking for
branches, jal, jalr, calls, returns and immediates. The first control-flow
instruction in the word is predicted as follows:
- **Branches** use the BHT counter when the entry is valid. Otherwise they
  fall back to the static rule: backward taken, forward not taken.
- **jal** is always taken.
- **Returns** pop the RAS.
- **Other jalr** use the BTB.
- **Calls** push the RAS.

The queue stores fetch words as fetched, still compressed. Each word keeps a
mask of valid half-words and the half-word index of the predicted
instruction.

The `realigner` turns words back into instructions. It keeps the upper half
of a word in a 16-bit register when a 32-bit instruction starts there. It
then completes that instruction from the next word. A straddling instruction
is never predicted: it is fetched as not taken, and the branch unit corrects
it if it jumps. The prediction stays attached to the instruction that starts
at the predicted half-word.

### Scoreboard, renaming and issue

The scoreboard is a circular buffer of 8 entries. An entry's slot number is
its transaction ID. Units write results and exceptions back by ID, in any
order. The commit stage sees the two oldest entries.

Write-after-write hazards are handled by the paper's light-weight renaming
scheme. Each architectural register gets one extra address bit. A 32-entry
table holds the current bit of each register. Each instruction that writes
rd does two things:
- it toggles the bit, so it is tracked under a new 6-bit name;
- its sources are looked up under their current names.

So two in-flight writers of the same register have different names. A
reader waits only for the youngest writer. An instruction stalls on its
destination only when a third writer would reuse a name that is still in
flight.

An instruction issues when all of these hold:
- the scoreboard has room;
- its unit is ready;
- each source is either not being written or has its result available, in
  the scoreboard or on a write-back bus in that same cycle.

Operands travel in a dispatch register, so a unit starts one cycle after
issue.

**Own choice:** issue waits behind an unresolved branch. Nothing younger
than a branch ever executes, so a mispredict only flushes the frontend and
decode. The cost is one or two cycles after each branch. The paper does not
say how far its core speculates past branches.

### Commit, traps, CSRs and debug

`commit_stage` retires up to two instructions per cycle, as the paper does to
avoid a full ROB starving issue. The second slot retires only if both of
these hold:
- the first instruction had no side effects;
- the second is a plain ALU, branch, multiply or load result with no
  exception.

Stores retire only when the store buffer can accept the commit.

Some instructions are carried out at commit and then refetch the next PC,
which flushes everything younger:
- CSR instructions;
- fence;
- sfence.vma, which also flushes both TLBs;
- wfi, which first waits for a wake-up;
- fence.i.

fence.i takes extra steps:
1. The commit stage asks the `controller` to write back and invalidate the
   D$.
2. It waits for the acknowledgement.
3. It retires the fence and flushes the I$.

The store buffer only has to drain its committed half before a fence.
Speculative stores behind the fence are younger and are flushed anyway.

Interrupts are synchronized to an instruction. When `csr_regfile` reports an
enabled interrupt, the commit stage attaches it to the next retiring
instruction, unless that instruction is a CSR access. This follows the
paper's rule for atomic CSR operations. `csr_regfile` does the following:
- implements trap delegation to S mode through medeleg and mideleg;
- supports direct and vectored trap vectors, returned in the same cycle so
  the frontend can redirect at once;
- implements MPRV, SUM, MXR, TVM, TW and TSR;
- handles the debug CSRs.

A debug request works like an interrupt. It saves dpc and dcsr and jumps to
`DM_BASE + 0x800`, where the debug module's code runs. `dret` returns.

### Virtual memory

Both TLBs are fully associative flip-flop arrays. Each has a tree pseudo-LRU
replacement and single-cycle flush, and each answers in the request cycle.
On a miss, the MMU starts the SV39 walker. The walker reads PTEs through its
own dedicated D$ port, port 0, so walks are cached like any other data. If
both TLBs miss, the DTLB is served first.

The MMU checks the following:
- canonical addresses;
- R, W and X permissions;
- U pages against U and S mode, including SUM and MXR;
- the A and D bits.

A walk that ends in a fault is remembered for the faulting page. It is
reported as a page fault when that page is next requested, so a squashed
access does not leave a stale fault.

### Data cache and memory ordering

The D$ is write-back and write-allocate, with 256 sets of 8 ways and 16-byte
lines. The set index lies inside the page offset, so virtual indexing
equals physical indexing. It has three ports, served in fixed priority:
- port 0: the walker;
- port 1: loads;
- port 2: the store buffer.

A hit is granted in cycle 0 and compared in cycle 1. The data passes through
output registers, so rvalid rises exactly 3 cycles after the grant. This
matches Table II's latency and the paper's extra pipeline stage on the
cache outputs.

On a miss, the cache:
1. picks an invalid way, or a round-robin victim;
2. writes back a dirty victim in one AXI burst;
3. refills the line in one AXI burst;
4. replays the request.

Addresses below `0x8000_0000` bypass the cache as single-beat AXI accesses.
These are used for peripherals.

Stores are held in the `store_buffer`. They enter its speculative part when
they execute. A store moves to the committed part when it retires, and only
committed stores drain to the cache. A load waits while any buffered store
touches the same 8-byte word, so a load never reads stale data.

## Departures from the paper

- **Divider timing.** The divider takes 1 to 65 cycles: an early out, or one
  cycle per quotient bit plus one. The paper says 2 to 64.
- **D$ concurrency.** The D$ finishes one request before it starts the next.
  The paper's cache serves hits on one port while another port misses.
- **No speculation past branches.** Issue waits for each branch to resolve
  (see above).
- **No FPU and no A extension.** The evaluated silicon configuration is
  RV64IMC.
- **No debug module.** It sits outside the core. The testbench models its
  halt code with a tiny ROM.
- **No ASIDs.** sfence.vma flushes the whole TLB.
- **A/D bits are not set by hardware.** A clear bit gives a page fault, which
  the privileged specification allows.
- **Sizes the paper does not state were chosen here:**
  - RAS depth 2;
  - instruction queue of 4 words;
  - store buffer of 4 + 4 entries;
  - 16-byte cache lines;
  - BTB is direct mapped and tagged.
- **Performance counters.** There are 10 counters plus mcycle and minstret.
  They count:
  - I$ misses;
  - D$ misses;
  - ITLB misses;
  - DTLB misses;
  - loads;
  - stores;
  - exceptions;
  - resolved branches;
  - mispredicts;
  - calls and returns.

## Verification

Every testbench in `tb/` checks itself. Each has a watchdog and ends with a
`TB_RESULT checks=N failures=M` line.

`ariane_tb` runs the full core at its default parameters. It uses a
behavioural AXI memory and a small test device:
- the device can arm a timer interrupt, raise a debug request and end the
  test;
- the program is assembled inside the testbench.

The program exercises a long list of mechanisms and checks that each one
happened at least once:
- branch prediction;
- calls and returns;
- indirect jumps;
- straddling compressed code;
- multiply and divide;
- load/store hazards;
- dirty evictions;
- uncached accesses;
- four exception types;
- self-modifying code with fence.i;
- wfi woken by a timer interrupt;
- a debug halt;
- S mode under SV39 with a page fault;
- the performance counters.

The whole program runs in about 2.7k cycles. `+trace` prints a simulation
trace with:
- every retired instruction;
- every trap;
- every register write;
- every load and store address, virtual and physical.

The D$ is write-back, so a program must execute fence.i before memory holds
its results. Both end-to-end benches do this before they signal the end.

`ariane_kernels_tb` also runs the full core at its default parameters. It
runs small versions of the integer micro-benchmarks used for the energy
figures, checks their results and reads mcycle and minstret around each
kernel:

| Kernel | Work | Cycles | IPC |
|---|---|---|---|
| ALU | 200 x dependent add/xor/addi loop | 1427 | 0.70 |
| Mul | 100 x dependent multiply-add | 628 | 0.64 |
| Div | 20 x signed 64-bit division, 61-62 quotient bits | 1364 | 0.07 |
| LS | copy 256 double words (cold caches) | 4504 | 0.34 |
| IGEMM | 8x8 64-bit matrix product | 11339 | 0.42 |

The numbers show the costs of this design's simplifications:
- A taken loop branch costs the fetch bubble plus the issue wait for branch
  resolution.
- A division costs about 64 cycles.
- The blocking D$ serialises refills.
- A load waits for buffered stores to the same word.

The block testbenches compare against reference models:
- `alu`, `multiplier` and `serdiv` check random and corner-case operands
  against SV arithmetic. They also check the multiplier's 2-cycle latency
  and the divider's latency bounds.
- `bht`, `btb`, `ras`, `tlb` and `instr_queue` are checked against
  behavioural models.
- `regfile` checks write-port priority and x0.
- `dcache` does random traffic on all three ports. It checks data, the
  exact 3-cycle hit latency and the flush write-back.
- `scoreboard` is checked against a queue model. The model covers
  out-of-order write-back, youngest-writer forwarding, dual retirement and
  flushes.
- `store_buffer` is checked against a two-queue model. The model covers
  commit order, flushes, cache grants and word matches.
- `instr_scan` decodes instructions built from random fields in every
  control-flow format.
- `decoder` checks random instructions of every major opcode. It checks
  the functional unit, operands, immediates and illegal-instruction
  exceptions, including privilege checks for CSRs, `mret`/`sret` and `wfi`.
- `branch_unit` checks all branch conditions, `jal` and `jalr` against
  computed outcomes, targets, link addresses and mis-prediction flags.
- `compressed_decoder` checks fixed encodings and random instructions
  built from fields against their 32-bit expansion.
- `csr_buffer` checks back-to-back CSR instructions, the same-cycle
  write-back and the buffered address and operand.
- `perf_counters` and `axi_arbiter` are checked against models as well.

Running a testbench with Verilator:

```
verilator --binary --timing -Wno-fatal -Irtl --top-module ariane_tb \
    rtl/ariane_pkg.sv rtl/*.sv tb/ariane_tb.sv
./obj_dir/Variane_tb
```

Replace the top module and testbench file to run a block bench.
