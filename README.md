# Vortex: a SIMT GPU core built from a RISC-V pipeline

Vortex runs OpenCL-style data-parallel kernels on a plain in-order RISC-V
(RV32IM) pipeline. It does this by adding only five instructions and a little
per-warp state. The core keeps several *warps* (hardware threads with their own
program counter), and each warp drives several *threads* (SIMD lanes) in
lock-step. Every lane has its own copy of the 32 integer registers. A normal
RISC-V instruction issued by a warp is executed by all of its active lanes at
once. The five extra instructions decide which warps exist and which lanes of a
warp are active:

| instruction | operands | effect |
|---|---|---|
| `wspawn` | rs1 = number of warps, rs2 = PC | activates warps 1..n-1 at that PC with one thread each |
| `tmc` | rs1 = number of threads | sets the warp's thread mask to the lowest n lanes; 0 ends the warp |
| `split` | rs1 = predicate per lane | starts a possibly divergent region (see below) |
| `join` | none | ends the region and restores the lanes that were set aside |
| `bar` | rs1 = barrier id, rs2 = number of warps | waits until that many warps have reached the barrier |

All five use the custom opcode `0x6B` (R-type, funct3 selects the instruction:
tmc 0, wspawn 1, split 2, join 3, bar 4). `split a0` encodes as `0x0005206b`
and `join` as `0x0000306b`. Operands that must be the same for the whole warp
(counts, PCs, barrier ids) are read from the lowest active lane.

The default core has 8 warps of 4 threads (a 4 KB register file), a 1 KB
2-way instruction cache, a 4 KB 2-way 4-bank data cache and an 8 KB 4-bank
shared memory.

## How a kernel starts

After reset only warp 0 is active, with only lane 0 on, at `START_PC`
(`0x8000_0000`). A typical kernel entry does the following:

```
csrr  a0, 0xFC1        # number of warps
la    a1, wrapper
wspawn a0, a1          # warps 1..NW-1 start at wrapper with one lane
j     wrapper          # warp 0 goes there too
wrapper:
csrr  t0, 0xFC0        # number of threads
tmc   t0               # all lanes on
csrr  s0, 0xCC0        # lane id (differs per lane)
csrr  s1, 0xCC1        # warp id
...                    # gid = wid*NT + tid, body of the kernel
tmc   zero             # warp ends
```

A register read before `tmc` turns the other lanes on only holds a value in
lane 0, so anything needed in every lane must be read again afterwards. The
core reports `busy = 0` once no warp is active and the pipeline has drained.

Read-only CSRs: `0xCC0` lane id, `0xCC1` warp id, `0xCC2` core id, `0xFC0`
threads per warp, `0xFC1` warps, `0xFC2` cores, `0xC00/0xC80` cycle counter,
`0xC02/0xC82` retired warp instructions.

## Warp scheduling

The scheduler (`vx_warp_scheduler`) keeps four bit masks over the warps:

* **active**: the warp exists (set by `wspawn`, cleared by `tmc 0`);
* **stalled**: the warp has an instruction in flight that will change its PC
  or thread mask, so nothing more may be fetched for it;
* **barrier**: the warp is waiting at a barrier;
* **visible**: the warps still to be served in the current round.

Each cycle it removes warps that are no longer ready from the visible mask.
If none are left, it refills the mask with `active & ~stalled & ~barrier`.
It then fetches for the lowest-numbered visible warp and clears that warp's
visible bit. Every ready warp therefore gets one fetch per round, and a warp
that stalls in the middle of a round is skipped without delaying the others.
The warp table next to the masks holds each warp's PC and thread mask.

A warp is stalled by any instruction that changes control: the five SIMT
instructions, branches and jumps. The stall is set in the cycle the
instruction comes back from the instruction cache and is decoded. The warp is
released when the execute stage resolves the new PC and thread mask. There is
no branch prediction. While one warp waits, the other warps keep the pipeline
busy. Each warp also has a 2-bit fetch epoch as a guard: a fetch that left
before a stall took effect carries an old epoch and is dropped. In this
pipeline the stall always takes effect in time, so the guard never fires.

## Divergence: split, join and the IPDOM stack

Lanes of one warp share one PC. When they disagree on a branch, the warp runs
both sides one after the other, with only the relevant lanes enabled. The
compiler brackets such a region with `split` and `join`:

```
split  a0              # a0 = condition per lane
beq    a0, zero, else
...then...             # lanes with a0 != 0
j      endif
else:
...else...             # lanes with a0 == 0
endif:
join                   # executed once per side
```

Each warp has a stack (`vx_ipdom_stack`) of entries `{fall-through, pc, mask}`,
`2*NUM_THREADS` deep, enough for every lane to diverge at each level.

* A **divergent `split`** (some active lanes true, some false) pushes two
  entries in one cycle:
  * a fall-through entry holding the current mask;
  * a not-taken entry holding PC+4 and the false lanes.

  The warp continues with only the true lanes.
* The first **`join`** pops the not-taken entry. The warp jumps back to just
  after the split with the false lanes enabled, so the `beq` now sends them to
  `else`.
* The second `join` pops the fall-through entry. It restores the full mask and
  continues after the join.
* A **uniform `split`** (all active lanes agree) does not change the mask or
  the PC. It pushes only a fall-through entry, so the single `join` that
  follows pops it and leaves the mask as it was.

  *This is a deliberate departure.* The description this design follows calls
  a uniform split a no-op, but it also has every join pop an entry. Taken
  literally, the two rules would let the join of a uniform region pop an outer
  region's entry. Pushing a fall-through-only entry keeps every split/join
  pair balanced.
* A `join` on an empty stack does nothing.

Nested regions simply stack up. Lanes that are masked off execute nothing:
they do not write registers and make no memory request.

## Barriers

`bar id, n` goes to the per-core barrier table (`vx_barrier_table`, 4
entries). Each entry holds a valid bit, the number of warps still to arrive
and a mask of the warps stalled on it.

* The first arrival sets the count to `n-1` and stalls the warp.
* Later arrivals count down and add their warp to the mask.
* The warp that brings the count to zero is not stalled. It clears the entry
  and releases every warp in the mask in the same cycle.
* `bar` with n <= 1 never waits.

A second, global barrier table spans the cores. The most significant bit of
the barrier id selects it. Only a single core is built here, so that table is
not part of the RTL, but the core already has its side of the connection:

* A `bar` with the MSB set is sent out on `gbar_req_valid`, together with:
  * `gbar_req_id` (id bits 30:0);
  * `gbar_req_count`, the count as given, not limited to this core's warps;
  * `gbar_req_wid`.
* The warp always waits.
* It is released when `gbar_release_valid` arrives with its bit set in
  `gbar_release_mask`.
* Local and global releases arriving in the same cycle are merged.

The whole-core test drives these ports from a small model of the global
table. Local barrier ids are taken modulo the table size.

## Pipeline

```
 F: scheduler -> I-cache (1 cycle) -> decode   (control instruction: stall warp)
 D: scoreboard check per warp (RAW and WAW)
 R: GPR read, all lanes of the warp
 E: ALU lanes + branch | CSR | GPU execute (SIMT ops) | LSU (holds the stage)
 W: register write under the thread mask, scoreboard release
```

Stages pass instructions with valid/ready handshakes.

* **Scoreboard.** Each warp has one busy bit per register. An instruction
  waits in D while any register it reads or writes is busy.
* **Execute.** The ALU lanes are combinational and cover all of RV32IM,
  including single-cycle multiply and divide, with the RISC-V results for
  divide-by-zero and overflow. Branches compare the operands of the lowest
  active lane; a warp-wide branch is expected to be uniform or guarded by
  `split`.
* **Load/store unit.** The LSU takes one warp memory instruction at a time and
  holds E until every lane is done. Lanes whose address falls in the
  shared-memory window (`0xFF00_0000`, 8 KB) go to the shared memory. All
  other lanes go to the data cache. Both requests run in parallel.

## Memory system

* **Instruction cache** (`vx_icache`): 1 KB, 2-way, one bank, 16-byte lines,
  LRU. A hit answers the cycle after the request. A miss blocks the cache
  while it fetches the line.
* **Data cache** (`vx_dcache`): 4 KB, 2-way, 4 banks, 16-byte lines. The bank
  is the line address mod 4.
  * In each cycle, every bank serves the lowest pending lane that maps to it.
    Lanes that hit in different banks finish together. A lane that shares a
    bank with a lower lane waits: this is a bank conflict, shown on
    `conflict_event`.
  * A load miss fetches the whole line into the LRU way.
  * Stores are write-through without allocation: they update a line that is
    present, and each lane's word goes out to memory.
* **Shared memory** (`vx_shared_memory`): 8 KB, 4 word-interleaved banks.
  Each bank serves one lane per cycle, and lanes that collide in a bank wait.
  It has no tags and never misses.
* **Memory port** (`vx_mem_arbiter`): one request at a time, with the data
  cache ahead of the instruction cache.
  * A read returns a 16-byte line.
  * A write carries one word with byte enables.
  * Both are acknowledged by `mem_rsp_valid`.

All sizes are parameters of `vortex`. The stated "1Kb" instruction cache is
taken as 1 KB, matching the "4KB" data cache written next to it.

## Top-level interface

`vortex` has the following ports:

* `clk` and `rst` (synchronous, active high);
* `busy`;
* the memory port: `mem_req_{valid,ready,rw,addr,wdata,byteen}` and
  `mem_rsp_{valid,data[127:0]}`;
* the global barrier connection: `gbar_req_{valid,id,count,wid}` out and
  `gbar_release_{valid,mask}` in (tie the inputs to zero in a single-core
  system);
* `events`, one strobe per mechanism: warp stall, stale fetch dropped,
  scoreboard hold, divergent/uniform split, join pop, wspawn, tmc, barrier
  stall/release, taken branch, I/D-cache miss, D-cache and shared-memory bank
  conflict, LSU wait;
* the 64-bit `cycles` and `instrs` counters.

Its parameters are:

* `NUM_WARPS`, `NUM_THREADS`, `NUM_BARRIERS`;
* `START_PC`, `SMEM_BASE`;
* `ICACHE_BYTES`, `DCACHE_BYTES`, `DCACHE_BANKS`;
* `SMEM_BYTES`, `SMEM_BANKS`.

## Files

`rtl/` holds one module or package per file:

* `vx_pkg`: encodings, CSR numbers, decoded-instruction struct and event
  struct;
* `vx_decoder`;
* `vx_warp_scheduler`;
* `vx_ipdom_stack`;
* `vx_barrier_table`;
* `vx_scoreboard`;
* `vx_gpr`;
* `vx_execute_unit`;
* `vx_gpu_execute`;
* `vx_csr_unit`;
* `vx_lsu`;
* `vx_dcache`;
* `vx_shared_memory`;
* `vx_icache`;
* `vx_writeback`;
* `vx_mem_arbiter`;
* `vortex`, the top.

Each file opens with a description of its timing. The description also says
which parts follow the published design and which are choices made here.

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. The
decoder test also covers the package. The directory also has:

* `tb_rv_asm_pkg.sv`: instruction encoders, used to write test programs in
  SystemVerilog;
* `tb_mem_model.sv`: a behavioural memory with a fixed latency;
* `tb_vortex.sv`: the whole-core test at default size.

The whole-core test runs a kernel on all 8 warps x 4 threads:

* It spawns the warps, stores to the data cache and the shared memory, runs a
  divergent if/else and a uniform split, and meets at a local barrier and then
  at a global one.
* It reads another warp's shared data, forces a 4-way bank conflict, runs a
  loop with multiply and divide, and reloads through the cache.
* It then checks all 192 result words.
* It also requires that every mechanism on `events` occurred at least once.
  The stale-fetch guard is the one exception, for the reason given above.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/vx_pkg.sv tb/tb_rv_asm_pkg.sv tb/tb_vortex.sv --top-module tb_vortex
./obj_dir/Vtb_vortex
```

The whole-core test finishes in about 3,000 cycles.

`tb_vortex_kernels.sv` runs four kernels on the default core. They are in
integer form because the core has no floating point:

* saxpy over 64 elements takes about 1,500 cycles;
* an 8x8 matrix multiply takes about 4,500 cycles;
* a bit count of 64 words takes about 5,200 cycles. Each thread's loop body
  runs only while its own word is non-zero. So the warp diverges inside a
  split/join in most rounds, as irregular kernels such as bfs do;
* a two-phase kernel takes about 6,000 cycles. Every thread writes its
  elements. All warps then meet at a `bar`, and every thread reads elements
  that other warps wrote. Higher warps start later on purpose, so the
  results are only right if the barrier holds the early warps back. This is
  the phase pattern of kernels such as gaussian.

All four use a grid-stride loop in which every thread handles two elements.
Every output is checked. The unit testbenches are
built the same way with their own top module (for example `tb_vx_dcache`).
Some of them draw Verilator width warnings; add `-Wno-fatal` if your version
stops on those.

## How far it goes, and where it differs

* A single core. Multi-core operation and the global barrier table itself
  are not built, only the core's ports to that table. The OpenCL runtime and
  compiler support are not built either.
* The published benchmark results came from a separate cycle-level simulator
  running Rodinia kernels. They need compiled OpenCL binaries and are not
  reproduced. The design-space sweep of warps x threads is available through
  parameters, but only 8 x 4 and the unit-test sizes have been simulated.
* Choices made here, where the description gives no detail:
  * the funct3 values of tmc, wspawn and bar, and their operand registers;
  * the CSR numbers;
  * reset state and `START_PC`;
  * the shared-memory window address;
  * line size and LRU replacement;
  * write-through data cache;
  * one outstanding memory request;
  * blocking LSU (one warp memory instruction at a time);
  * stalling the warp on branches;
  * lowest-index warp priority;
  * barrier-table size;
  * the empty-stack `join` rule.
* Multiply and divide are single-cycle combinational. A real implementation
  would pipeline or iterate them.
* The caches and the shared memory are plain SystemVerilog arrays. No SRAM
  macros are instantiated.
* The published block diagram draws decode as a stage of its own. Here the
  instruction is decoded in the cycle it returns from the instruction cache.
  This is what lets the warp stall in that same cycle. The scoreboard check is
  the next stage.
* The published scheduler also stalls a warp that waits for memory. Here a
  load or store does not stall its warp. The LSU holds the execute stage
  instead, so all warps wait behind a data-cache miss.
* `ipdom_full` is not used by the core. A correctly nested program never needs
  more than `2*NUM_THREADS` entries, and an assertion in the stack catches an
  overflow in simulation.
