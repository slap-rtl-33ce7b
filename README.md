# SLAP: a split-latency VLIW cluster with variable SIMD length

A conventional VLIW DSP runs all of its functional units in lock-step. If a
scalar load misses in the data cache, the vector units stop too. If a long
floating-point vector op holds an operand, the scalar units stop too. Yet in
baseband code the two halves barely exchange data. The scalar half computes
addresses and loop counts; the vector half does the arithmetic.

SLAP (Split Latency Adaptive Pipeline) cuts the lock-step. The machine still
runs one VLIW program. In hardware, though, the program is split in two:

* a scalar **Global Program Control Unit (GPCU)** fetches every bundle, runs
  the scalar work and computes every vector address;
* one or more vector **Compute Units (CUs)** get the vector operations through
  FIFOs and run them later, at their own pace.

The GPCU may run ahead of a CU by as many operations as the CU's instruction
queue holds. Vector loads become **triangular loads**. The GPCU sends the read
early. The data lands in a small content-addressed memory inside the CU. The CU
picks it up there when it reaches the load. Because the link between GPCU and
CU is only a set of queues, one GPCU can feed any number of CUs. Reassigning
CUs between GPCUs therefore changes each GPCU's vector length while the
machine runs.

This repository holds synthesizable SystemVerilog for such a cluster, plus
self-checking testbenches. The default configuration has two GPCUs sharing
eight SIMD4 CUs, which gives SIMD12 + SIMD20 at reset. The queues have 32
entries and each GPCU has a 16 KB scalar data cache.

## The cluster at a glance

```
                 prog_mem (1024 x 64-bit bundles, one read port per GPCU)
                    |                               |
        +-----------+-----------+       +-----------+-----------+
        | slap_gpcu 0           |       | slap_gpcu 1           |
        |  gpcu_fetch           |       |  gpcu_fetch           |
        |  DP, DC, E1..E3       |       |  DP, DC, E1..E3       |
        +--+--------------+-----+       +--+--------------+-----+
           |              | disp_t         |              | disp_t
     gpcu_dcache 16KB     +---------+  +---+     gpcu_dcache 16KB
           |                        |  |                 |
      dc_mem port 0             cu_xbar (owner per CU)   dc_mem port 1
                           /   /   /  |  \   \   \   \
                        slap_cu x 8: instruction queue, load/store
                        address queues, slap_cam data memory,
                        SIMD4 pipeline E1..E7
                           |   |   |  ...            |
                        cu_mem port 0 ...        cu_mem port 7
```

| file | block |
|---|---|
| `rtl/slap_pkg.sv` | shared types, bundle encoding, memory-port structs |
| `rtl/slap_top.sv` | the cluster |
| `rtl/slap_gpcu.sv` | GPCU: dispatch (DP), decode/issue (DC), scalar execute, vector address generation |
| `rtl/gpcu_fetch.sv` | the three-phase program fetch (PF_ADRSEND, PF_WAIT, PF_REC) |
| `rtl/gpcu_dcache.sv` | scalar data cache |
| `rtl/prog_mem.sv` | shared program SRAM |
| `rtl/cu_xbar.sv` | CU-to-GPCU association, push broadcast, combined full/idle flags |
| `rtl/slap_cu.sv` | vector compute unit |
| `rtl/fp32_alu.sv` | one lane's binary32 add, subtract and multiply |
| `rtl/slap_cam.sv` | CU data memory for triangular loads |
| `rtl/slap_fifo.sv` | the elastic queues |

The memory hierarchy behind the caches and CUs is not part of the design.
Every memory port is a port of `slap_top`: NG data-cache ports and NC CU ports.
Each is a valid/ready request channel plus a response channel that echoes the
address. `tb/mem_hier_model.sv` is a behavioural stand-in with random latency
and out-of-order responses.

## How an instruction travels

A program is a sequence of 64-bit bundles. Each bundle has one scalar slot and
one vector slot (see *Instruction bundle* below).

1. **Fetch.** `gpcu_fetch` sends a bundle address (PF_ADRSEND). The program
   SRAM reads it (PF_WAIT) and the bundle comes back (PF_REC) into a
   four-entry fetch buffer. After a redirect, the first bundle is at the
   dispatch stage four cycles later. After that, fetch delivers one bundle per
   cycle.
2. **Dispatch (DP).** The bundle moves on to DC when DC is free. If its
   vector slot is not a NOP, it is pushed into the instruction queue of every
   CU this GPCU owns in that same cycle, so the bundle waits while **any** of
   those queues is full. A bundle behind a taken branch or a HALT stays put.
3. **Decode/issue (DC).** The bundle issues whole or waits whole. It waits if:
   * a scalar register it reads or writes is still in flight;
   * the data cache is busy and the bundle has a scalar load or store;
   * it is a `V_LD` or `V_ST` and a load (store) address queue of an owned CU
     is full, or a CU data memory has no free entry for a load.

   For `V_LD` and `V_ST` the GPCU computes `s[a] + imm` as the bundle issues.
   The crossbar adds `16*rank` for each owned CU, where rank is the CU's
   position among the GPCU's CUs, counted by CU index. The address goes into
   the CU's load or store address queue, one cycle after the instruction went
   into the instruction queue. A load address also allocates an entry in the
   CU's data memory, which sends the read to memory at once. The GPCU does not
   wait for a vector result, ever. That is the decoupling.
4. **Scalar execute.** ALU results are written after three stages (E1..E3).
   Scalar loads write when the cache answers. Either value is forwarded to DC
   in the cycle it is written, so a dependent bundle can issue then. A taken `S_BNEZ` redirects fetch
   and costs a few bubbles; nothing is predicted.
5. **CU issue.** Each CU looks at the head of its own instruction queue and
   issues one op per cycle, in order. If the queue is empty, the CU waits. If
   the head is a `V_LD` whose data has not arrived, the CU waits too: this is
   the triangular-load stall. Loads and arithmetic ops (integer or
   binary32) pass through seven execute stages (E1..E7) and write the vector register file at the end. A busy bit
   per register holds back dependent ops, and the value being written back
   is forwarded to the op that issues in that cycle. A dependent op
   therefore issues 7 cycles after its producer. `V_ST` reads its register
   and sends the store in the cycle it issues.

Two stall rules fall out of this. They are the only coupling between the two
halves:

* the GPCU stalls when an owned CU's queue is full;
* a CU stalls when its queue is empty, or when its load data is not there yet.

## Triangular loads and the CU data memory

This is the part that makes the decoupling safe. The three corners of the
"triangle" are:

* the GPCU, which sends the request;
* the memory, which returns the data into the CU's data memory (`slap_cam`);
* the CU, which reads the data from there later, by address.

`slap_cam` has 32 entries. Each holds an address, a 128-bit beat, a use count,
and request / in-flight / data-valid bits.

* **Allocate** (GPCU pushes a load address). If a live entry already has this
  address, its count goes up and no second read is sent. Otherwise a free entry
  is taken and its read is queued. The GPCU is stalled while no entry is free.
  It even waits when the address would merge, so that the stall decision does
  not depend on the address being computed in the same cycle.
* **Memory port.** One request per cycle. A vector store from the CU always
  wins. Otherwise the queued read of the lowest-numbered entry goes out.
* **Fill.** A response is matched by its address to the entry whose read is in
  flight. This is why responses may return in any order.
* **Lookup and consume** (CU issues `V_LD`). The CU looks up the address at the
  head of its load address queue. A hit needs valid data. Consuming lowers the
  count. An entry is free again when its count is zero and its read has
  returned.
* **Stores.** A `V_ST` goes to memory at once. It also overwrites the data of a
  live entry with the same address and marks it valid. A response that arrives
  later for that entry is ignored.

The ordering argument:

* The CU is in order, so every load that comes before the store in program
  order has already read the CAM when the store issues.
* Every later load that was allocated early (the GPCU runs ahead) sees the
  stored data.
* A load allocated after the store reads memory after the store was accepted.
  The memory port must keep a read behind an earlier write from the same port.

Without this rule, a GPCU that runs far ahead would prefetch stale data.

## Variable SIMD: sharing CUs between GPCUs

`cu_xbar` keeps an owner register for each CU: an "assigned" bit and a GPCU
index. A GPCU that owns k CUs runs SIMD(4k). One `V_LD` or `V_ST` then covers
16*k contiguous bytes. At reset, GPCU 0 owns CUs 0, 1 and 4, and GPCU 1 owns
CUs 2, 3, 5, 6 and 7: SIMD12 and SIMD20, the example configuration of the
architecture.

To move a CU, drive `cfg_valid` with `cfg_cu`, `cfg_owner` and `cfg_assign`.
`cfg_assign = 0` leaves the CU unowned. The change happens at the clock edge
where `cfg_ready` is high. That is only when the CU has drained (queues,
pipeline and data memory empty) and no GPCU is pushing to it. Software decides
when to do this, typically between loops, since a loop's address stride
depends on the vector length. `ncu[g]` reports how many CUs GPCU g owns. A
vector slot of a GPCU that owns no CU is dropped.

## Instruction bundle

The architecture is meant to run the unchanged object code of an existing
DSP. That instruction set is not public, so this design uses a small stand-in
ISA, defined in `slap_pkg`. Each slot is 32 bits:
`op[31:28] d[27:24] a[23:20] b[19:16] imm[15:0]`, with `imm` signed. There are
16 scalar registers of 32 bits and, per CU, 16 vector registers of 4 x 32
bits. All registers reset to zero.

| scalar slot | effect |
|---|---|
| `S_ADDI d,a,imm` | s[d] = s[a] + imm |
| `S_ADD/S_SUB d,a,b` | s[d] = s[a] +/- s[b] |
| `S_LW d,a,imm` | s[d] = M[s[a]+imm] (data cache) |
| `S_SW a,b,imm` | M[s[a]+imm] = s[b] (write-through) |
| `S_BNEZ a,imm` | if s[a] != 0, pc += imm (in bundles) |
| `S_HALT` | stop; `done` rises when the CUs have drained |

| vector slot | effect, per owned CU of rank r |
|---|---|
| `V_ADD/V_SUB/V_MUL d,a,b` | v[d] = v[a] op v[b], per 32-bit integer lane |
| `V_FADD/V_FSUB/V_FMUL d,a,b` | the same in IEEE-754 binary32 per lane |
| `V_LD d,a,imm` | v[d] = M[s[a] + imm + 16r] (triangular load) |
| `V_ST d,a,imm` | M[s[a] + imm + 16r] = v[d] |

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NG` | 2 | GPCUs |
| `NC` | 8 | CUs |
| `IQ_DEPTH` | 32 | CU instruction queue depth (24 and 32 were the sizes studied; 32 was best) |
| `AQ_DEPTH` | 32 | load / store address queue depth (own choice) |
| `CAM_ENTRIES` | 32 | CU data memory entries (own choice) |
| `DCACHE_BYTES` | 16384 | GPCU data cache (8, 16 and 32 KB were studied; 16 KB loses little) |
| `PM_DEPTH` | 1024 | program memory bundles (own choice) |
| `RESET_ASSIGN`, `RESET_OWNER` | all, `8'b1110_1100` | reset association, one owner bit per CU |

Lanes per CU (4), the register counts and the execute depths are constants in
`slap_pkg` and in the module parameters `VPIPE` (7) and `SPIPE` (3).

## Where this design departs from the architecture it follows

* **Arithmetic.** The original CUs are floating-point, but the format is
  not given. Here each lane does binary32 add, subtract and multiply with
  round-to-nearest-even. Subnormal inputs and results are flushed to zero, and
  every NaN result is the quiet NaN `0x7FC00000`. Integer add, subtract and
  multiply are offered as well. The arithmetic is done in E1 and the result is
  carried to the end of E7, so the seven-stage latency is kept. A real
  implementation would spread the FP datapath over those stages.
* **ISA and issue width.** The bundle has one scalar and one vector slot. The
  original has several functional units per side (scalar, load and store FUs
  in the GPCU; vector, vector-load and vector-store FUs in the CU), each its own
  VLIW slot.
* **GPCU pipeline.** DP and DC are separate stages, as in the original. Which
  check sits in which stage is this design's choice. Scalar loads and stores
  go through a blocking cache rather than a five-stage load/store unit.
* **Forwarding.** Both the GPCU and the CUs forward only from their
  write-back stage. The original forwards too, but does not say from where.
* **Data cache.** The organisation is this design's own. The architecture only
  fixes the sizes.
* **Program memory.** A plain SRAM, not an instruction cache.
* **Reassignment protocol, address split across CUs (16 bytes per rank), CAM
  size and merge rules.** These are this design's own.
* The memory hierarchy is external and is not provided as RTL.

## Simulating

Each testbench in `tb/` prints `TB_RESULT checks=N failures=M` and finishes. It
has a cycle watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/slap_pkg.sv tb/tb_slap_top.sv --top-module tb_slap_top -Mdir obj -o sim
./obj/sim
```

Replace `tb_slap_top` with any other testbench:

| testbench | what it establishes |
|---|---|
| `tb_slap_fifo` | queue contents, flags and occupancy under random traffic; exactly 32 entries |
| `tb_slap_cam` | merge of equal addresses, fill by address in reverse order, store overriding a stale fill, full/idle |
| `tb_slap_cu` | 7-cycle dependent-issue distance (forwarding); 32-entry queue full behind a waiting load; C = A*B + A over 16 vectors, in integer and in binary32 |
| `tb_fp32_alu` | 20000 random and special-case operand pairs against a double-precision reference rounded to binary32 |
| `tb_gpcu_fetch` | 4-cycle redirect-to-dispatch latency; one bundle per cycle; order under back-pressure; redirect and stop |
| `tb_gpcu_dcache` | hit latency 2, miss fill, write-through, no write-allocate, conflict eviction, 2000 random accesses |
| `tb_slap_gpcu` | scalar results of a loop; vector instruction pushes in program order, address pushes a stage later with computed addresses; no push into a full queue |
| `tb_cu_xbar` | reset association (3 and 5 CUs); routing, rank offsets and flag combining; reassignment rule |
| `tb_prog_mem` | two-port reads with two-cycle latency |
| `tb_slap_top` | the full cluster at default size, two phases (see below) |
| `tb_slap_configs` | the six queue-depth / cache-size configurations (24 or 32 entries; 8, 16 or 32 KB) on one program; results and miss counts against a cache model |
| `tb_slap_regions` | five-region workload of scalar-heavy and mixed code on one GPCU (see below) |

`tb_slap_top` runs both GPCUs at once on a loop that mixes scalar work with
`C = A*B + A` on vectors: in integer arithmetic in phase 1 and in binary32 in
phase 2. The scalar work sums a table through the data cache
and runs the loop. Phase 1 uses the reset association (SIMD12 and SIMD20).
Then three CUs are moved on the fly (SIMD24 and SIMD8) and the loop runs
again. The test checks every stored word and both scalar sums. It also counts
the events that define the architecture and fails if any of them never
happened:

* GPCU stalls on a full CU queue;
* CU waits on an empty queue;
* triangular-load waits;
* register interlocks on both sides;
* forwarding on both sides;
* cache misses;
* data-memory merges;
* reassignments.

Each phase takes about 800 cycles, and the whole run takes well under a second.

`tb_slap_regions` imitates a baseband trace that alternates between
scalar-heavy stretches (control, parameter generation) and stretches that mix
scalar and vector work. Regions 1, 3 and 5 walk a 64-word table through the data
cache and carry one vector op per iteration. Regions 2 and 4 run a SIMD12
vector loop. Each region starts on its own, and the test prints its cycles,
cache misses and stalls. Vector loads and stores bypass the GPCU's data cache,
so the table missed in region 1 is still cached after the vector regions, and
regions 3 and 5 run with no miss. The test checks this. It also checks every
result, and that the CUs starve in scalar regions and wait for load data in
mixed ones. The region sizes are made up; the real traces cannot run on this
ISA.

`tb_slap_configs` builds the cluster six times, once for each pairing of queue
depth (24 or 32) and data-cache size (8, 16 or 32 KB), and runs the same
program on all six. The program walks a 12 KB table twice and then runs a
vector loop. With 8 KB the second walk misses on two thirds of its lines;
with 16 or 32 KB it hits everywhere. The test predicts each miss count with a
small cache model and checks it. It prints each configuration's finishing cycle
and how often the GPCU stalled on a full queue. The shallower queues stall it
more often with the default random seed.

## How far to trust it

Every block has a testbench that compares against values computed
independently of the block. The cluster test runs at the default size. None of
this has been checked against the original machine's cycle counts, which are
not available, and the stand-in ISA means no original program can be run. The
performance numbers reported for the architecture (for example, up to about
12 % fewer cycles than a lock-step DSP with a 32 KB cache) cannot be reproduced
with this RTL alone. Synthesis has been run only as a coarse, technology-free
pass. The data cache and the CU data memory are plain arrays. A real
implementation would map them to SRAM macros.
