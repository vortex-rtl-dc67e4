# Vortex: a RISC-V SIMT GPU with texture sampling, in SystemVerilog

Vortex runs GPU-style programs on a RISC-V core. It adds only six
instructions to RV32IM. Each core holds several *wavefronts* (warps). A
wavefront is a group of threads that share one program counter and execute in
lock-step, each on its own registers. With these few instructions, ordinary
RISC-V code can do the four things a GPU programming model needs:

* start wavefronts (`wspawn`);
* switch threads on and off (`tmc`);
* let threads take different sides of a branch and meet again afterwards
  (`split` / `join`);
* wait for each other (`bar`).

A sixth instruction, `tex`, hands a texture lookup to a fixed-function
sampler. That makes the same core usable for 3D graphics.

The default configuration is 4 wavefronts of 4 threads per core ("4W-4T")
and 32 cores. Each core has a 16 KB instruction cache, a 16 KB data cache
with 4 banks, and 16 KB of shared memory.

## The GPU instructions

All six use the RISC-V custom-0 opcode (`0001011`). `funct3` tells them apart.
Operand values are taken from the lowest active thread.

| funct3 | instruction | operands | effect |
|---|---|---|---|
| 0 | `tmc rs1` | count | thread mask = lowest `count` threads; 0 ends the wavefront |
| 1 | `wspawn rs1, rs2` | count, pc | activates wavefronts 1..count-1 at `pc`, each with thread 0 on |
| 2 | `split rs1` | predicate | pushes reconvergence information and keeps the threads whose predicate is non-zero |
| 3 | `join` | - | pops the reconvergence stack (see below) |
| 4 | `bar rs1, rs2` | id, count | waits until `count` wavefronts have reached barrier `id` |
| 5 | `tex rd, rs1, rs2, rs3` | u, v, lod | samples the bound texture and returns one RGBA8 colour per thread (R4 format, `rs3` in bits 31:27) |

Control status registers give each thread its identity:

| CSR | meaning |
|---|---|
| `0xCC0` | thread id |
| `0xCC1` | wavefront id |
| `0xCC2` | core id |
| `0xCC4` | thread mask |
| `0xFC0` | number of threads |
| `0xFC1` | number of wavefronts |
| `0xFC2` | number of cores |
| `0xC00` | cycle counter |

The texture state is kept in CSRs starting at `0x7C0`:

| CSR | meaning |
|---|---|
| `0x7C0` | base address |
| `0x7C1` | format (0 RGBA8, 1 RGB565, 2 L8) |
| `0x7C2` | wrap (0 clamp, 1 repeat) |
| `0x7C3` | filter (0 point, 1 bilinear) |
| `0x7C4` | log2 width |
| `0x7C5` | log2 height |
| `0x7C8 + lod` | byte offset of each of the 8 mip levels |

## Divergence: the reconvergence (IPDOM) stack

Each wavefront has its own stack (`vx_ipdom_stack`, depth 2 x threads). A
compiler brackets a divergent `if` like this:

```
split  p          # p != 0 for threads taking the "then" side
beq    p, x0, else
...then...
j      end
else: ...
end: join
```

`split` behaves as follows:

* It always pushes the current thread mask, marked *fall-through*.
* If the predicate really divides the active threads, it also pushes an
  entry (threads with p = 0, PC of the instruction after the `split`).
* The wavefront then continues with only the p != 0 threads.

At the first `join` the stack pops the not-taken entry. The wavefront jumps
back to just after the `split` with the other threads, re-evaluates the
branch and runs the `else` side. At the second `join` the fall-through
entry restores the full mask, and execution continues past `join`.

When every thread agrees, only the fall-through entry is pushed. The single
`join` then just restores the mask. No extra pass is made.

## Wavefront scheduling and barriers

`vx_warp_sched` keeps these masks:

* *active*: the wavefront is running;
* *stalled*: an instruction of it is in flight that may change its control flow;
* *barrier*: it waits at a barrier;
* *visible*: it has not yet been fetched in this round.

It also keeps a table of PC and thread mask per wavefront. Each cycle it
fetches, in round-robin order, one wavefront that is active, not stalled
and not at a barrier. That wavefront is then stalled.

* The decoder releases it at once for ordinary instructions.
* For branches and GPU instructions the release comes only when the
  execute stage has resolved the new PC or mask.

So a wavefront never runs ahead of its own control flow, and no branch
prediction or flushing is needed.

`bar id, count` is handled as follows:

* If the most significant bit of `id` (bit 2) is clear, it goes to the
  core's barrier table (`vx_barrier`), which counts arriving wavefronts.
* If the bit is set, it goes to the processor's global table, whose waiters
  are all wavefronts of all cores.
* The wavefront that completes the count releases every waiter at once.

## Core pipeline (`vx_core`)

```
fetch ─▶ I-cache ─▶ decode ─▶ ibuffer (per wavefront) ─▶ issue ─▶ ALU / CSR / GPU / LSU / TEX ─▶ writeback
  ▲  scheduler                      scoreboard ┘  GPRs ┘                 │
  └────────────── branch outcome, tmc, wspawn, split/join, bar ─────────┘
```

**Fetch and decode.** The instruction-cache tag carries the wavefront, its
thread mask and the PC, so the decoder knows what it decodes. Decoded
instructions wait in a small FIFO per wavefront (`vx_ibuffer`).

**Issue.** Each cycle one FIFO head is considered, in rotating order.

* It issues when the scoreboard (`vx_scoreboard`, one pending bit per
  register per wavefront) shows no hazard and its execution unit is free.
* Operands are read from the register file (`vx_gpr`: 32 registers per
  thread per wavefront) in the same cycle.

**Execute.** The units are:

* **ALU** (`vx_alu`): RV32I and the multiplies of RV32M. The branch decision
  is taken by the lowest active thread.
* **GPU unit** (`vx_gpu_unit`): applies `tmc`, `wspawn`, `split`, `join` and
  `bar` to the scheduler.
* **CSR unit** (`vx_csr_unit`).
* **Load/store unit** (`vx_lsu`).
* **Texture unit** (`vx_tex_unit`).

**Writeback.** `vx_writeback` retires one result per cycle. Its priority is
LSU, texture, CSR, ALU. It also clears the scoreboard bit.

**Load/store unit.** `vx_lsu` sends every active thread's address either to
the data cache or, for addresses from `0xFF000000` up, to the banked shared
memory (`vx_smem`). It collects the per-thread replies before writing back.
The LSU and the texture unit share the data cache; the LSU has priority.

## The cache (`vx_cache`, `vx_cache_bank`)

Every thread of a wavefront may send a request in the same cycle, and they must be served by a few single-ported
SRAM banks. The cache does this in two parts.

**Bank selector.** It is combinational and runs each cycle. For every bank
it picks the first requesting lane. Up to `NUM_PORTS` (2) *virtual ports*
then let other lanes that read the same line in the same bank ride along in
the same access. The remaining lanes are refused (not ready) and retry. This
reduces bank conflicts when neighbouring threads read neighbouring words.

**Bank.** Each bank is a four-stage pipeline:

1. *Schedule.* It chooses one request per cycle, in this order: a request
   replayed from the miss status holding registers (MSHR), then a fill from
   memory, then a new core request.
2. *Tag.* Looks up the tag.
   * A read miss takes an MSHR entry.
   * Only the first miss to a line sends a memory request.
   * Writes go straight to memory (write-through, no write-allocate).
3. *Data.* Reads or writes the data RAM. A fill wakes its MSHR entries,
   which are then replayed from stage 1 and hit.
4. *Response.* Enters the response queue.

The pipeline itself never stalls. A core request is admitted only if the
MSHR, the response queue and the memory queue have room for everything
already in flight plus this request. This "early full" rule rules out the
deadlock in which a full MSHR blocks the fill it is waiting for.

**Around the banks.** The bank responses that carry the same tag are merged
into one reply to the core. The banks' memory requests are arbitrated
round-robin. The cache is direct-mapped with 64-byte lines.

## Texture unit

`vx_tex_unit` executes one `tex` instruction at a time in six steps:

0. Read the texture state from the CSRs.
1. Compute, per thread, the four texel addresses of the 2x2 quad around the
   sample point and the 8-bit blend weights.
   * Coordinates are unsigned fixed point with 20 fraction bits (1.0 = 2^20).
   * Point filtering uses the texel under the sample, with weights 0.
2. Remove duplicate word addresses among the 16 texels.
3. Issue the unique words to the data cache.
4. When the last word has returned, copy each word to every texel that
   needs it.
5. Pass the texels to `vx_tex_sampler`. It converts the format to RGBA8 and
   blends in two cycles: two horizontal lerps, then one vertical lerp, with
   `lerp(a,b,w) = (a*(256-w)+b*w)>>8`.

Point sampling deliberately reuses the bilinear path. It has the same
latency, so no variable-latency logic is needed.

Trilinear filtering is left to software: two `tex` calls on adjacent levels,
then an average.

## Processor (`vx_processor`, the top)

The 32 cores form 8 clusters of 4. The memory ports are merged at two
levels:

* The cores of a cluster are merged by `vx_mem_arb`.
* The clusters are merged again by a second `vx_mem_arb` into the single
  line-wide memory port.

Each level appends its input number to the tag, and responses are routed
back by it.

Ports of the top:

* `mem_req_*`: `rw`, line address, 512-bit data, byte enables, tag.
* `mem_rsp_*`: data and tag. Responses may come back in any order.
* `busy`.

After reset, every core starts wavefront 0, thread 0, at `0x80000000`.

## Differences from the published design, and limits

* **Not built:**
  * The floating-point unit (the original uses FPGA DSP blocks).
  * Integer divide (it decodes as a no-op).
  * The optional L2/L3 caches.
  * The host interface (AFU, PCIe, DMA).
* **Memory system:** the caches are direct-mapped and write-through. The
  original's associativity and write policy are not specified.
* **Texture unit:** sizes are powers of two, and only three formats and two
  wrap modes are offered. The coordinate format and the CSR addresses are
  this design's own.
* **Control flow:** control instructions stall their wavefront until they
  are resolved.
* **Global barrier:** its count is a number of wavefronts (cores x
  wavefronts for a full-processor barrier).

## Simulating

Each block has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line. For example:

```
verilator --binary -j 8 --top-module tb_vx_processor -Irtl rtl/vx_pkg.sv rtl/vx_*.sv tb/tb_vx_processor.sv
./obj_dir/Vtb_vx_processor
```

`tb_vx_processor` runs a 2-core processor. `tb_vx_processor_full` runs the
default 32-core processor. In both, the testbench assembles a small program
into a behavioural memory. The program spawns wavefronts, diverges, samples
a texture, exchanges data through shared memory between two barriers, and
meets at a global barrier. The testbench then checks every stored result and
that each of these mechanisms actually occurred.
