# Manticore in SystemVerilog

Manticore is a many-core machine for one job: simulating RTL quickly. It does
that with parallelism and no run-time synchronisation. A hardware design is
simulated one clock cycle at a time. Each simulated cycle has the same work
and the same data dependencies as the last. So a compiler can split that work
over hundreds of small cores ahead of time and fix everything in advance:

- which instruction each core issues in each machine cycle,
- which message crosses which network link in which cycle.

This is bulk-synchronous parallelism with the barrier taken out. No core ever
waits for another. All cores start together and execute programs of equal
length, so they reach the end of a simulated cycle together by construction.
One simulated cycle is called a **virtual cycle (Vcycle)**.

The rest of the hardware follows from that choice:

- The cores have no interlocks, forwarding or branches.
- The network has no buffers and no flow control. A message that meets
  another at a busy link is simply dropped; the compiler makes sure that
  never happens.
- Off-chip memory makes timing unpredictable. It is hidden by stopping the
  clock of the whole processor array for as long as a DRAM access takes. To
  every core, a global load then has a fixed latency.

This repository holds synthesizable RTL for the whole machine, excluding the
DRAM chip and the host's PCIe link. The default is a 15 × 15 grid (225 cores)
with a 128 KiB cache. It also holds self-checking testbenches, down to an
end-to-end run of the full 225-core machine.

## The machine

```
 host registers ─┐                      control clock domain
                 ▼
        ┌─────────────────┐   compute_en  ┌────────────┐
        │ host_controller │──────────────▶│ clock_gate │──▶ gclk
        └─┬──────┬────────┘               └────────────┘
          │boot  │global load/store, exception      │
   ┌──────▼───┐  │                                  ▼   compute clock domain
   │bootloader│  │  ┌───────┐   DRAM   ┌──────────────────────────────────┐
   └──────┬───┘  └─▶│ cache │◀───────▶ │ processor_grid: 15×15 cores,     │
          └────────▶└───────┘          │ each with a torus switch; the    │
          boot words ──────────────────▶ privileged core at (14,0)        │
                                       └──────────────────────────────────┘
```

There are two clock domains, and they share one clock:

- **Compute domain**: every core and every network switch
  (`processor_grid`). These run in strict lock-step.
- **Control domain**: whatever deals with unpredictable timing. That is the
  cache, the bootloader and the host interface (`host_controller`).

The compute clock is the control clock passed through a clock gate. The
control domain stops the compute clock for a global memory access, an
exception or a boot, and restarts it afterwards. The compute domain never
sees those stops.

The top module is `manticore` (`rtl/manticore.sv`). It brings out:

- a small host register port,
- a DRAM line port,
- per-core `booted` and `vcycle_start` flags,
- a NoC drop flag, for observation.

## A core

Each core (`rtl/core.sv`) has a 16-bit datapath and these memories:

| Memory | Size | Access | Notes |
|---|---|---|---|
| Instruction memory | 4096 × 64 bits | 2-cycle read | Written by the boot receiver, later by the message receiver |
| Register file | 2048 × 17 bits | 4 reads + 1 write per cycle, 2-cycle read | Four mirrored banks; bit 16 is an overflow/carry bit for multi-word arithmetic |
| Scratchpad | 16384 × 16 bits (32 KiB) | 3-cycle read | Built as 4096 × 64 with 16-bit lane strobes and a read multiplexer |
| Custom function unit | 32 functions × 16 lanes × 16-entry truth tables | 4 cycles | See below |

### The pipeline and its one rule

The pipeline has 14 stages: fetch 3, decode and register read 3, execute 4,
memory 3, writeback 1. Counted from the cycle an instruction's PC is
presented:

| Cycle | Work |
|---|---|
| 0 | PC to instruction memory |
| 1–2 | instruction read; decoded at the end of cycle 2 |
| 3–4 | register file read |
| 5 | operands ready; ALU/CFU start; scratchpad address = rs1 + imm; PRED, SEND, CFG, EXPECT, GLD, GST issue |
| 6–8 | ALU / CFU (4 cycles in all) |
| 9–11 | scratchpad: a store commits at 9; load data is ready at 12 |
| 12 | result selected |
| 13 | register write |

There is no hazard logic. A value written at cycle 13 is seen by a register
read that starts at cycle 3 of a later instruction. The register file returns
data written in the cycle its address is presented. So **a consumer must be
fetched at least 10 cycles after its producer**, that is with 9 instructions
between them. The compiler fills the gap with independent work or NOPs. The
testbenches' little assemblers insert 9 NOPs after every instruction that
produces a value.

There are no branches. Conditional behaviour uses two things:

- `MUX` selects between values.
- A one-bit predicate, set by `PRED`, guards scratchpad stores (`LST`) and
  global stores (`GST`).

### Custom functions

A custom function is any 4-input bitwise Boolean function of four 16-bit
registers. Bit lane *i* of the result is looked up in a 16-entry truth table
at index `{op4[i], op3[i], op2[i], op1[i]}`. The CFU holds 32 such functions.
Each lane has its own 32 × 16 LUT memory, so lanes can differ, which allows
shifts and masks to be folded in.

Truth tables are written by the `CFG` instruction: one lane of one function
from a register. The published design loads them as part of booting. Here an
initialisation program booted ahead of the simulation program, or the
program's own first Vcycle, runs the CFGs, and the boot stream carries only
instructions.

### Instruction encoding

Every instruction is 64 bits with fixed fields. The encoding is this design's
own. The named instruction set follows the machine described for Manticore.

| Bits | Field |
|---|---|
| [3:0] | opcode |
| [14:4] | rd |
| [25:15] | rs1 |
| [36:26] | rs2 |
| [47:37] | rs3 |
| [58:48] | rs4 |
| [63:59] | funct |
| [63:48] | imm16, overlapping rs4/funct |

| Opcode | Meaning |
|---|---|
| 0 NOP | |
| 1 SET | rd = imm |
| 2 ARITH | rd = alu(funct, rs1, rs2, rs3) |
| 3 CUST | rd = custom[funct](rs1..rs4) |
| 4 LLD | rd = spm[rs1 + imm] |
| 5 LST | if pred: spm[rs1 + imm] = rs2 |
| 6 GLD | rd = global[{rs3, rs2, rs1}] (privileged) |
| 7 GST | if pred: global[{rs3, rs2, rs1}] = rs4 (privileged) |
| 8 PRED | pred = rs1[0] |
| 9 SEND | register rd of core imm = {y, x} := rs1 |
| 10 EXPECT | exception imm if rs1 != rs2 (privileged) |
| 11 SLICE | rd = bit field of rs1 |
| 12 CFG | write a truth-table lane |

The ALU operations are ADD, ADDC, SUB, AND, OR, XOR, SLL, SRL, SRA, SEQ,
SLTU, SLTS, MUX, MUL (low 16 bits), SETI and SLICE. `manticore_pkg` has
`encode` / `encode_imm` helper functions.

### The privileged core

One core, at (DIM_X−1, 0), also executes `GLD`, `GST` and `EXPECT`. These
reach a 48-bit word address space in DRAM through the cache. In any other
core they decode as NOPs.

## Messages and the Vcycle

### The network

Cores exchange single 16-bit values over a **uni-directional 2-D torus**
(`rtl/noc_switch.sv`). A message is:

- its target's {y, x}, 8 bits each,
- an 11-bit destination register,
- a 16-bit value.

Each switch works as follows:

- It has one registered output each for east (x), south (y) and its own
  core, so each hop takes one cycle.
- It routes a message east until the column matches, then south until the
  row matches, then delivers it.
- When two messages want the same output in the same cycle, the one from the
  north (y) wins over the one from the west (x), which wins over the core's
  own injection. The loser is dropped and `dropped` pulses.

There are no buffers and no back-pressure. Correct programs never drop a
message, because the compiler staggers its SENDs so that no two messages
share a link in the same cycle. The drop flag exists so that tests can prove
a collision really loses data.

### Receiving: the epilogue

A delivered message is not written to the register file directly. The
receiver turns it into `SET rd, value` and appends it to the core's own
instruction memory, just after the program. Epilogue slot *n* is used for the
*n*-th message of the Vcycle. The core then *executes* those SETs after its
program. This is the **epilogue**, and it keeps the register file's single
write port free for the pipeline.

A Vcycle on one core is therefore:

```
pc: 0 ............ L-1 | L ........ L+E-1 | sleep S cycles |
    program (L)         epilogue (E SETs)    idle
```

Three timing consequences matter to anyone writing programs by hand:

1. **All cores need the same L + E + S.** Only then do all cores start their
   next Vcycle in the same cycle. The `sleep` length S pads shorter programs.
2. **A message must land before its receiver's epilogue slot is fetched.** The
   epilogue starts at that core's own L, not at a common point. A receiver
   with a short program reaches its epilogue early, and then executes the
   slot's SET from the previous Vcycle. The end-to-end tests pad every
   program past the last SEND for this reason.
3. **E must equal the number of messages the core receives per Vcycle.** The
   slot pointer restarts at every Vcycle start.

## Booting

A boot command from the host does three things:

1. It holds a **soft reset** for a few cycles. This resets only the core
   state machines, not register files or scratchpads.
2. It starts the **bootloader** (`rtl/bootloader.sv`).
3. The bootloader reads the program binary from DRAM through the cache, one
   16-bit word per access. It sends each word as a NoC message, injected at
   the privileged core's switch.

A core in boot state treats every message it receives as the next word of its
boot stream (`rtl/boot_receiver.sv`):

```
INSTRUCTION_LENGTH L
L instructions, each as four 16-bit words, least significant first
EPILOGUE_LENGTH E
SLEEP_LENGTH S
COUNT_DOWN C                     (sent by the bootloader itself, see below)
```

The binary in DRAM at address BASE is each core's stream without COUNT_DOWN,
for cores in index order k = y·DIM_X + x.

DRAM time cannot be predicted, so cores cannot just start when their stream
ends. After all streams have been sent, the bootloader sends the COUNT_DOWN
words back-to-back, one core per cycle, in index order:

- Core k receives its word at T + k + 1 + hops(k). Here hops(k) is its torus
  distance from the injection point.
- It then waits C(k) cycles before fetching pc 0, where C(k) =
  (N − 1 − k) + (HOPS_MAX − hops(k)).
- The sum of those terms is the same for every core, so all N cores start in
  the same cycle.

In the full-size test, 225 cores all assert `vcycle_start` in the same cycle,
and then every VC compute cycles after that.

The bootloader costs about 7 control cycles per boot word, since each cache
access is a separate request. One full 4096-instruction program on each of
225 cores would be 225 × 16,387 words, about 26 million cycles or 55 ms at
475 MHz. That is negligible against a simulation run, and reading whole cache
lines would cut it several-fold.

## Global stalls, exceptions and the host

### Global memory

The privileged core's `GLD`/`GST` registers a request at the end of its
stage 5. The host controller sees it and does the following:

1. In the same cycle it drops the compute clock enable, combinationally. The
   next compute edge is already suppressed.
2. It hands the access to the cache (`rtl/cache.sv`). The cache is 128 KiB,
   direct-mapped, write-allocate and write-back: 4096 lines of sixteen 16-bit
   words. Address bits [3:0] give the word, [15:4] the line, and the rest is
   the tag.
3. A hit completes 3 cycles after the cache starts. A miss first writes back
   a dirty victim line and then fetches the new line.
4. It raises the enable for exactly one edge. On that edge the core takes
   the load value into its pipeline and the held request is cleared.

Every access stalls, hit or miss. To the program, a global access has the
same fixed latency as any other instruction.

The clock gate (`rtl/clock_gate.sv`) is the usual latch-plus-AND cell. The
latch is transparent while the clock is low, so the gated clock cannot
glitch. On an FPGA this is the global clock buffer's enable.

The compute clock is derived from the control clock. A zero-delay simulator
therefore updates compute-domain flops one delta after control-domain ones.
Control signals that cross into the compute domain can look one cycle early
in a waveform. All such signals are single pulses or held stable during a
stall, so behaviour is unaffected.

### Exceptions

`EXPECT rs1, rs2, id` raises exception *id* when the values differ. It
freezes the compute clock in the same way, but holds it until the host
resumes. This is how `$display`, `$finish` and assertions of the simulated
design reach the host.

The usual host sequence after an exception is:

1. read STATUS for the id,
2. write CMD.flush and wait for STATUS.flushing to clear,
3. read the values the program stored with GST straight from DRAM,
4. write CMD.resume.

### Host registers (`host_addr`, 64-bit)

| Addr | Name | Meaning |
|---|---|---|
| 0 | CMD (write) | bit 0 boot, bit 1 resume after an exception, bit 2 flush the cache |
| 1 | BASE | word address of the program binary |
| 2 | STATUS | bit 0 booting, 1 flushing, 2 exception pending, 3 stalled on memory; [31:16] exception id |
| 3 | CYCLES | control cycles since boot |
| 4 | STALLS | cycles with the compute clock stopped |
| 5, 6 | HITS, MISSES | cache counters |

Reads are combinational on `host_addr`.

## What follows the published design and what is this design's own

These parts follow the published design:

- the execution model (program, epilogue, sleep; no barrier);
- the 14-stage split of the pipeline, and the lack of interlocks;
- all memory sizes and latencies listed above;
- the four mirrored register-file banks, and the 17-bit registers;
- the scratchpad built from a 4096 × 64 memory;
- the custom-function structure and its index;
- received messages turned into SETs in the instruction memory;
- the buffer-less dimension-ordered torus that drops on conflict;
- the privileged core, global stall by clock gating, and exceptions served
  by the host after a flush;
- the 128 KiB direct-mapped write-back cache;
- the boot stream format and the countdown start;
- the performance counters.

These are this design's own choices. The published description is silent on
each:

- The instruction encoding, the exact ALU operation list, and a single-bit
  predicate.
- The `CFG` instruction, which writes custom-function truth tables from a
  running program instead of from the boot stream.
- The register file returns data written in the same cycle, which gives the
  10-cycle rule.
- Switch priority y > x > core. The published work arbitrates statically but
  gives no order.
- The privileged core's position; injecting boot words at its switch; the
  binary layout; the countdown formula.
- A 256-bit cache line and a plain valid/ready line interface to DRAM.
- The host register map, and the one-edge release of a stall.

The published description gives the scratchpad as "up to 128 KiB" in one
place and as a 16384 × 16 memory in its implementation. This design builds
the 16384 × 16 (32 KiB) version.

Not included:

- the compiler;
- initialisation programs for registers and scratchpads (any program of SETs
  and LSTs will do);
- the PCIe shell and the DRAM controller, which are top-level ports here.

## Capacity

With default parameters, each core holds a program plus epilogue of at most
4096 instructions. That makes 921,600 instruction slots in the 225-core
machine. The nine benchmark designs reported for the original prototype all
have a critical path of between about 300 and 2,200 instructions per Vcycle
(derived from their reported simulation rates at 475 MHz), so they fit. Their
state was sized to fit in the scratchpads. Larger state goes to global memory
at the cost of a stall per access.

## Simulating it

The design needs only Verilator 5 (with `--timing` for the testbenches). From
the repository root, for a testbench `tb/tb_X.sv`:

```
verilator --binary --timing -Irtl -Itb rtl/manticore_pkg.sv tb/tb_X.sv \
          --top-module tb_X -Mdir obj_X && obj_X/Vtb_X
```

Every testbench checks itself against values computed independently and ends
with a line `TB_RESULT checks=<n> failures=<n>`. Each has a watchdog.
Registers and memories are not reset (as in the hardware), so the tests pass
under any initial values.

| Testbench | Covers |
|---|---|
| `tb_register_file`, `tb_instruction_memory`, `tb_scratchpad` | random traffic against a shadow copy; latencies, same-cycle writes, lane strobes |
| `tb_alu`, `tb_cfu`, `tb_decoder` | every operation and random operands against a reference model; CFU truth tables; every opcode field |
| `tb_message_receiver`, `tb_boot_receiver`, `tb_core_controller` | epilogue slots; boot stream parsing; countdown, Vcycle and sleep timing |
| `tb_core` | a hand-assembled program on one core: arithmetic, custom functions, scratchpad, predication, SEND, and the privileged operations with a modelled stall |
| `tb_noc_switch` | routing and priority on random traffic, including drops |
| `tb_processor_grid` | a 3 × 2 grid booted by the testbench: lock-step start, messages, a deliberate collision, global stores and loads, an exception per Vcycle |
| `tb_cache` | random loads and stores against a flat model with a small cache; evictions, write-backs, flush; 3-cycle hit latency |
| `tb_bootloader`, `tb_host_controller`, `tb_clock_gate` | streams and countdowns of a small grid; stall, exception and boot sequencing; a glitch-free gated clock |
| `tb_manticore` | the whole machine at 3 × 2, end to end (see below) |
| `tb_manticore_full` | the same at the default size, 15 × 15 |

The end-to-end tests (`tb/manticore_host.sv` is their host and DRAM) generate
a program in which:

- the privileged core keeps a counter in DRAM (GLD, add, GST);
- it sends the counter to the other cores;
- they compute from it and send results back;
- it stores the results with GST;
- two cores collide on purpose in one switch;
- the privileged core raises an exception when the counter reaches a limit.

The host boots the machine, waits for the exception, flushes the cache,
checks every stored result and the lost message in DRAM, reads the counters,
and resumes. The test counts boots, global stall cycles, cache hits and
misses, drops, exceptions and Vcycles, and a mechanism that never happened
is a failure.

The 225-core run has these figures:

- booting takes 168,614 cycles (seven cores run long programs, the other 218
  a single NOP);
- 9 Vcycles;
- 8 drops, one per collision;
- about 9,100 stalled cycles.

It takes about three minutes of Verilator time, build included. On grids
larger than 8 cores, six spread-out cores and the privileged core take part,
because the privileged core's store loop for every core would not fit in
4096 instructions.

A broken copy of every block was simulated against its testbench, and each
one was caught.
