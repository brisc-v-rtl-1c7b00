# A coherent multi-core RV32I system with a parameterised cache hierarchy

This RTL builds a small shared-memory multiprocessor for design-space
exploration. Several in-order RISC-V cores (RV32I, seven pipeline stages)
each have their own level-1 instruction and data caches. All of these L1
caches hang on one shared bus to a shared, inclusive level-2 cache, and the
L2 sits on top of an on-chip main memory. A coherence controller owns the
bus and keeps the private copies consistent with the MESI protocol, by
snooping: every L1 listens to what the others do and gives up or shares its
copy of a line when needed.

The point of the design is that its parts are independent and
parameterised. The number of cores, the set count, associativity and
replacement policy of each cache level, and the memory size are all module
parameters. They share one message-based interface between cache levels, so
a configuration can be changed and re-measured without touching the RTL.
The hardest parts to follow are the coherence transactions on the shared bus
and the races between a cache's own traffic and the snoops it must answer.
Most of this document is about those.

```
  core7 #0            core7 #1                ...   core7 #N-1
  |      |            |      |
 L1 I$  L1 D$        L1 I$  L1 D$      (l1cache, each with a snooper)
  |      |            |      |
  +------+--- shared bus (request/answer per L1, one snoop broadcast) ---+
                              |                                      coherence_controller
                          L2 cache (lxcache, inclusive)
                              |
                     main_memory_interface   (line  <->  words)
                              |
                        main_memory          (synchronous BRAM)
```

## Default configuration

The defaults reproduce the multi-core configuration the design was
evaluated with. You get it by instantiating `brisc_system` with no
parameters.

| Parameter (brisc_system) | Default | Meaning |
|---|---|---|
| `N_CORES` | 4 | cores; the evaluation used 1, 2, 4 and 8 |
| `L1_INDEX_BITS`, `L1_WAYS` | 8, 4 | 256 sets x 4 ways x 16 B = 16 kB per L1 cache |
| `L2_INDEX_BITS`, `L2_WAYS` | 9, 4 | 512 sets x 4 ways x 16 B = 32 kB shared L2 |
| `OFFSET_BITS` | 2 | 4 words (16 B) per line, at every level |
| `ADDRESS_BITS` | 16 | word-address width: 2^16 words = 256 kB main memory |
| `REPLACEMENT` | 0 | 0 = true LRU, 1 = pseudo-random |
| `PROGRAM` | "" | hex file loaded into main memory at start-up |

A note on sizes: the published description gives the L1 as "256 lines" and
the L2 as "512 lines", and elsewhere as 16 kB and 32 kB. Read as line counts,
those two statements disagree. The memory-bit totals reported for the
synthesised systems match 16 kB / 32 kB, so 256 and 512 are taken to be set
counts.

All cores start at address 0. A program tells cores apart by reading the
`mhartid` CSR (`csrr rd, mhartid`), which returns the core number.
Cache `2c` is core c's instruction cache and cache `2c+1` its data cache.

## The seven-stage core (`core7`)

Stages: **F1** (PC and next-PC select, instruction request), **F2** (wait for
the instruction), **D** (decode, register read, immediate, bypass), **E**
(ALU, branch/jump resolution), **M1** (data request), **M2** (wait for the
data) and **WB**.

Two stages wrap each memory access: one issues the request and the next
receives the answer. This lets a synchronous memory or a cache hit return
data a cycle later without stalling. It is the reason for seven stages
instead of five.

**Memory interface contract** (instruction and data side alike). A request
is a read/write strobe, a word address, and for stores the data (shifted to
its byte lane) with byte enables. The memory takes the request on a clock
edge where `ready` is high. The answer comes later as `valid` with the word
*and the address it belongs to*. F2 and M2 accept an answer only when that
address equals the one they are waiting for. This is the "I-Valid"/"D-Valid"
check, and it makes late answers to squashed fetches harmless. Stores also
wait for their `valid`.

**Stalls.**
- A data miss (`valid` not yet back in M2, or `ready` low in M1) freezes the
  whole pipeline.
- An instruction miss only starves D: bubbles flow on while older
  instructions finish.
- A RAW dependence is bypassed into D from E, M1 or M2, youngest first
  (`hazard_unit`). WB needs no bypass because the register file is
  write-first.
- A load's value exists only once M2 has its data. An instruction that needs
  it waits in D until then: two bubbles when memory answers in one cycle.

**Branches and jumps** resolve in E. There is no predictor: fetch keeps going
at PC+4. A taken branch squashes F2 and D, and the target is requested in the
same cycle. So every taken branch or jump costs three bubbles, and a one-
instruction loop retires once every four cycles. The testbench checks
exactly that.

`FORWARDING=0` turns every dependence into a stall, the "stall-only" variant
of the pipeline. Event outputs (`ev_retire`, `ev_load_use`, `ev_forward`,
`ev_flush`, `ev_mem_stall`, `ev_fetch_bubble`) and a write-back probe
(`wb_we/wb_rd/wb_data`) are there for counting and checking.

## Messages between cache levels

Every cache level talks to the next through the same bundle: a message, a
line address and a whole line of data in each direction. The message codes
(`msg_e` in `brisc_pkg`, 4 bits):

| Code | Sent by | Meaning |
|---|---|---|
| `NO_REQ` | all | nothing |
| `RD_REQ` | L1, controller | read a line |
| `RFO_REQ` | L1 | read for ownership (write miss): other copies must go |
| `UPG_REQ` | L1 | write to a SHARED line: other copies must go |
| `WB_REQ` | L1, controller | write a dirty line down |
| `FLUSH_REQ` | L1, L2 | write back if dirty and drop, everywhere |
| `INVAL_REQ` | L1 | drop everywhere without writing back |
| `RESP_S` / `RESP_E` / `RESP_M` | controller, L2 | line returned; install SHARED / EXCLUSIVE / MODIFIED |
| `ACK` | controller, L2 | request without data completed |

A requester holds its message until the answer comes. An answer lasts one
cycle.

## L1 cache (`l1cache`) and its snooper

**Organisation.** `2^INDEX_BITS` sets of `NUMBER_OF_WAYS` ways. Each line
holds `2^OFFSET_BITS` words, a tag and a 2-bit MESI state. The cache is
write-back and allocates on write misses. The victim is an invalid way if
there is one, otherwise the choice of `replacement_controller` (per-way age
counters for true LRU, or an LFSR).

**Processor side.** A request is taken when `ready` is high and looked up in
the next cycle. A hit answers in that cycle (`valid`, `data_out`,
`out_address`) while `ready` stays high, so back-to-back hits stream at one
per cycle with two requests in flight. On a miss `ready` falls. The cache
then, in order:
1. writes back a dirty victim (`WB_REQ`);
2. requests the line (`RD_REQ` for a read, `RFO_REQ` for a write);
3. installs the line in the state the answer names;
4. repeats the lookup, which now hits.

A write hit on EXCLUSIVE becomes MODIFIED silently. A write hit on SHARED
sends `UPG_REQ` first.

**Snooper.** The controller broadcasts a message and line address for one
cycle. The snooper reads tags and states through its own port, answers in
the same cycle, and updates the state at the clock edge. Its answer is:
`snoop_ack`; `snoop_had_copy`; and `snoop_dirty` with the line, if the line
was MODIFIED.

| Snooped | MODIFIED | EXCLUSIVE | SHARED |
|---|---|---|---|
| `RD_REQ` | give line, -> SHARED | -> SHARED | stays |
| `RFO_REQ`, `UPG_REQ`, `INVAL_REQ` | give line, -> INVALID | -> INVALID | -> INVALID |
| `FLUSH_REQ` (also the L2 back-flush) | give line, -> INVALID | -> INVALID | -> INVALID |

**Races and how they are closed.** These are the parts worth reading
closely in the code.
- A snoop has priority over the processor. No processor access completes in
  a cycle that carries a snoop, so a hit never returns data the snoop is
  just taking away.
- A victim write-back or a flush can be waiting for the bus while a snoop
  takes the same MODIFIED line. The snooper's copy already reached the L2,
  so the waiting write-back is cancelled. The cache then goes on with its
  fetch; otherwise an older copy could overwrite newer data.
- A line can be invalidated between a cache's `UPG_REQ` and its answer.
  Because of that, an upgrade is answered like an ownership request: the
  line comes back with `RESP_M`, and the cache installs it.

## Coherence controller (`coherence_controller`)

The controller runs one bus transaction at a time. Pending L1 requests are
granted round robin. A transaction goes through these steps:

1. **Grant** the request and latch its message, address and data.
2. **Snoop**: for RD, RFO, UPG, FLUSH and INVAL, broadcast to every *other*
   L1 for one cycle and collect all answers in that cycle. WB skips this
   step.
3. **Dirty copy**: if a snooper returned a MODIFIED line, write it to the L2
   first. Both the L2 and the requester then see current data.
4. **L2 access**: RD for RD/RFO/UPG, otherwise the request itself.
5. **Answer**: `RESP_S` if another cache kept a copy on a read, `RESP_E` if
   none did, `RESP_M` for RFO/UPG, and `ACK` for the rest.

While the controller waits for the L2, the L2 may need to evict a line. It
then asks for a **back-flush**. The controller broadcasts `FLUSH_REQ` for
that line to all L1s and hands any dirty copy back to the L2. One idle cycle
follows every answer, so a freshly filled line is used at least once before
a snoop can take it away.

The bus is simple rather than fast: one transaction at a time, no split
transactions. The evaluation only needs bandwidth to grow roughly with core
count on a compute-bound program.

## L2 cache (`lxcache`)

The L2 has the same organisation and parameters as the L1, plus `NUM_PORTS`
request ports served round robin. The system uses one port, because the
controller already serialises the L1s. Each request is:
- one cycle of arbitration;
- one cycle of lookup;
- on a miss, a memory fill (a `WB_REQ` miss installs the carried line
  without reading memory);
- one cycle of answer.

`FLUSH_REQ` writes a dirty line to memory and drops it; `INVAL_REQ` drops it.

**Inclusion.** The L2 keeps no record of which L1s hold a line. So before
replacing *any* valid victim it asks the level above for a back-flush
(`bf_req`/`bf_address` until `bf_done`). It merges a dirty copy that comes
back (`bf_dirty`/`bf_data`), and writes the victim to memory if dirty. This
costs some bus cycles on evictions of lines no L1 holds, but it cannot lose
a line.

## Main memory path

`main_memory_interface` splits a line transfer into `2^OFFSET_BITS` word
accesses, one issued per cycle. A line read completes 5 cycles after it is
requested, a line write 4 (4-word lines). `main_memory` is a synchronous
single-port word array with one cycle of read latency. It is initialised
from `PROGRAM` with `$readmemh` when that is non-empty. A second write port
(`prog_write`, `prog_address`, `prog_data`) lets a testbench load a program
while the system is held in reset.

## Differences from the published design, and what is not here

- **Not built:**
  - the single-cycle, five-stage and out-of-order cores, which the toolbox
    offers as alternatives to the seven-stage core;
  - the on-chip network router and the off-chip SRAM controller (alternative
    main-memory attachments);
  - the configuration GUI and the software toolchain;
  - cacheless single-core systems. The core can be driven directly by any
    one-cycle memory, as in its testbench, but no top module for that is
    provided.
- **Flush and invalidate** are implemented in the L1, controller and L2, but
  RV32I has no instruction to issue them. The top ties the L1 `flush` and
  `invalidate` inputs low.
- **Own choices where the source is silent:**
  - message encodings and hand-shakes;
  - the one-transaction bus;
  - back-flush on every eviction;
  - UPG answered with data;
  - the age-counter LRU;
  - byte enables on the data interface;
  - `mhartid` as the only CSR;
  - FENCE/ECALL treated as no-ops;
  - word addressing on all memory ports;
  - synchronous active-high reset everywhere.
- No misaligned loads or stores, traps or interrupts.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `alu_tb`, `regfile_tb`, `control_unit_tb`, `hazard_unit_tb` | random and directed vectors against models written in the testbench |
| `core7_tb` | random programs (ALU, loads/stores of all sizes, branches, JAL, AUIPC+JALR, LUI, mhartid) compared write-by-write with an instruction-level model, with ideal and with random-latency memories; the 3-bubble jump penalty |
| `replacement_controller_tb` | LRU order against a reference list; random mode coverage |
| `l1cache_tb` | random reads/writes/snoops against a memory model and a MESI model |
| `coherence_controller_tb` | several L1 models and an L2 model under random traffic; every answer and snoop checked against a golden MESI model |
| `lxcache_tb` | two ports, round-robin order, FLUSH/INVAL, random traffic with back-flushes of dirty lines, inclusion |
| `main_memory_interface_tb`, `main_memory_tb` | data and latencies |
| `prime_scaling_tb` (with helper `prime_run`) | the prime-counting workload (primes below 300) on 1, 2, 4 and 8 cores at default cache sizes: correct count on each, and each doubling of cores must cut cycles below 70 %. Measured: 349,783, 175,123, 93,263 and 56,143 cycles |
| `brisc_system_tb` | the full default system runs a parallel prime count on 4 cores, then conflicting-line and byte/half accesses; requires every mechanism (load-use stall, bypass, branch flush, memory stall, L1/L2 misses, L2 eviction, snoop write-back, shared answer) to occur |

`tb/rv_asm_pkg.sv` is a small assembler (functions returning instruction
encodings) the testbenches use to build programs.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/brisc_pkg.sv tb/rv_asm_pkg.sv tb/brisc_system_tb.sv \
    --top-module brisc_system_tb -o sim
./obj_dir/sim
```

Replace `brisc_system_tb` with any other testbench name. The simulator finds
the other modules in `rtl/` by file name.

## Changing the design

- **Cores:** change `N_CORES`. The controller arbitrates `2*N_CORES` caches.
- **Cache geometry:** `*_INDEX_BITS`, `*_WAYS`, `OFFSET_BITS`. The line width
  must be the same at every level.
- **Memory size:** `ADDRESS_BITS`, in words.
- **Replacement policy:** `REPLACEMENT`. A new policy goes into
  `replacement_controller`, which only has to name a victim way for a set
  and hear which way was used.
- **Other software:** supply a `PROGRAM` hex file (32-bit words, one per
  line) or write main memory through the program port during reset.
