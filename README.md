# A CGRA that keeps running when its memory does not answer

A coarse-grained reconfigurable array (CGRA) runs a loop body as a fixed
schedule of contexts. Each context is one configuration word per processing
element (PE), and every PE steps to the next context in lockstep. This works
well when all data sit in a scratchpad (SPM) that answers in one cycle. It
fails on irregular or large data, such as graph gathers, histograms or palette
lookups. There, one missing word stalls the whole array for tens of cycles, and
utilisation drops to a few percent.

This design attacks the problem in three ways:

1. **A cache hierarchy next to the scratchpads.** Each pair of memory PEs
   shares a crossbar. The crossbar sends an access either to a 2 KB SPM or to a
   non-blocking L1 cache. The four L1 caches share one L2 cache, which sits in
   front of main memory.
2. **Runahead execution.** When the array would stall on a load miss, it saves
   its state and keeps executing. Missing values become *dummy* values. Every
   memory access whose address does not depend on a dummy value turns into a
   prefetch. When the miss that started runahead returns, the array restores
   its state and re-executes from the saved point. Most of its next misses are
   then already on their way.
3. **Reconfigurable L1 capacity and line size.** The four L1 caches draw their
   ways from one pool of 32 ways. A hardware monitor watches the miss rate.
   When the rate gets too high, a tracker samples the addresses each memory PE
   touches and interrupts the host. Host software picks a new split of ways and
   a new line size per L1, and a small controller applies it.

Sizes follow the paper's "Reconfig" configuration: an 8x8 array and 4 SPMs of
2 KB. There are 4 L1 caches of 4 KB, 8 ways and 64 B lines each, with 16 MSHRs
each and a 1-cycle hit. The L2 is 128 KB, 8-way, with 128 B lines and an
8-cycle hit. An L2 miss costs about 80 cycles.

## Array and contexts (`pe`, `pe_alu`, `pe_config_mem`, `cgra_array`)

Each PE has:

- input registers R0..R3, one per neighbour (N, E, S, W);
- a crossbar;
- operand registers P (predicate), I1 and I2;
- an ALU and a result register RES;
- a configuration memory with 8 contexts of 128 bits (`cfg_word_t` in `cgra_pkg`).

On each *fire* the PE does three things. It runs `op` on P/I1/I2 into RES. It
loads P/I1/I2 for the next context. It latches neighbour inputs into R0..R3.
Outputs come only from registers (R0..R3, RES or a constant). There is
therefore no combinational path between PEs, and one hop costs one context.

Every value carries a `dmy` flag. The ALU ORs the flags of the operands it
uses.

The array has no stall logic of its own. It advances only when `fire` is 1.
`cgra_top` raises `fire` when all four crossbars report that their accesses for
the current context are complete. The left-column PEs (rows 0..7 of column 0)
are the memory PEs. In a memory PE, `OP_LOAD` reads `mem[I1]` into RES and
`OP_STORE` writes I2 to `mem[I1]`.

Every PE state register has a backup copy. `save` copies state into the
backups and `restore` copies it back. The context counter and the top-level
fire counter are saved the same way.

## Crossbars, scratchpads and runahead rules (`mem_xbar`, `spm`, `ra_temp_store`)

Each crossbar (a "virtual SPM") serves two memory PEs (rows 2i and 2i+1). It
has its own SPM, temporary store and L1 controller.

Routing:

- An address below `SPM_BYTES` (2048) goes to the crossbar's SPM. This
  completes in one cycle.
- Any other address goes to the L1. When both ports need the L1 in the same
  context, they go one after the other, and the loser counts as contention.
- A hit completes the access. A load miss waits for the L1 to report that the
  fill of its MSHR has finished, and then asks again. A store miss is taken by
  the L1 (write-allocate) and does not stall.

In runahead mode (`ra_mode`) the rules change:

| access | normal | runahead |
|---|---|---|
| load, address valid | SPM / L1 | temporary store first, then SPM / L1. A miss becomes a prefetch and returns a dummy value at once |
| load, address dummy | — | dropped, returns a dummy value |
| store, valid address and data | SPM / L1 | written to the temporary store only. A cache address is also sent as a prefetch |
| store, dummy address or data | — | dropped |

The temporary store is a 16-entry associative buffer with FIFO replacement
(`ra_temp_store`). It lets later runahead loads see earlier runahead stores. It
is cleared on restore, so no store made in runahead ever reaches memory or the
SPM.

## Runahead control (`runahead_ctrl`)

Runahead starts when three things are true: runahead is enabled, a crossbar
waits on a load miss, and no reconfiguration hold is active. It then:

1. pulses `save` and `enter_ra`;
2. records which (crossbar, MSHR) pair caused the stall;
3. sets `ra_mode`.

Fills of other MSHRs do not end runahead. When the recorded MSHR's fill
completes, `restore` is pulsed. The array then resumes at the saved context and
re-issues the load, which now hits. The controller also counts runahead entries
and runahead cycles.

## Non-blocking L1 (`l1_cache_ctrl`, `mshr_file`, `ls_table`, `store_buffer`)

Each L1 controller looks up an access in all the pool ways that its permission
registers give it. It then acts on the result:

- **Hit:** one cycle. A load returns data. A store writes the word and marks
  the line dirty.
- **Miss:** the block address is compared with the MSHR file. A match merges
  the request into that MSHR. Otherwise a free MSHR is taken (Valid,
  Block Address, Issued), and the MSHR is later issued to the L2. A load or
  store also takes a load/store table (LST) entry: Valid, MSHR number, dest
  register (port), type and offset. Store data wait in an 8-entry store buffer
  and are merged into the line when it arrives. Prefetches take only an MSHR.
- **Fill:** the L2 returns a full 128 B line. The controller writes the
  physical lines of the virtual line into the LRU victim way. It first writes
  back any dirty victim line (write-back). It then merges buffered stores,
  releases the LST entries and frees the MSHR. Last, it pulses `fill_done` with
  the MSHR number.
- **Retry:** returned when the MSHR file, the LST or the store buffer is full,
  or when the controller owns no ways.

Line size: the physical L1 line is 32 B. A *virtual* line is 2^m physical
lines (`line_m`, m = 0..2, so 32/64/128 B; 64 B after reset). Virtual line k
of a way occupies 2^m adjacent sets. Replacement treats those sets as one. Its
LRU ages are kept only on the first set of the group (the representative set),
and a hit on any physical line of the group updates that set. Because the L2
line (128 B) equals the largest virtual line, a virtual line is always either
fully present or fully absent.

## The way pool (`l1_way_pool`)

The pool holds 32 ways x 16 sets x 32 B, with tag, valid and dirty bits and a
5-bit age for each line. Each way has a 4-bit permission register. It names
the L1 controller that owns the way, or holds `4'hF` for no owner. After reset
each controller owns 8 ways. Each controller has its own lookup, fill,
word-write and LRU-touch ports. Writes from different controllers never hit
the same way, because a way has only one owner.

## Shared L2 (`l2_cache`)

The L2 is 128 KB, 8-way, with 128 B lines and LRU replacement using 3-bit
saturating ages. It serves the L1 writeback and read requests with a fixed
priority (lowest L1 first). A hit returns the line
exactly `HIT_LAT` = 8 cycles after the request is accepted. Misses go to main
memory through a tagged read port (up to `Q` = 16 outstanding) and may return
in any order.

The L2 is non-inclusive. An L1 writeback that misses in the L2 is written to
memory with a 32 B segment mask. It does not allocate a line. The testbench
memory model answers after 78 cycles, so an L2 miss costs about 80 cycles.

## Monitor, tracker and reconfiguration (`miss_monitor`, `access_tracker`, `reconfig_ctrl`)

**Monitor.** It counts L1 misses from all four controllers in windows of
`MON_WIN` cycles. This gives a *time miss rate*: misses per window, not misses
per access. When a window ends with more misses than the threshold `TR`, it
pulses `trigger`.

**Tracker.** For `TRK_WIN` cycles it records up to 64 {address, time} samples
per memory PE. It then raises `irq`, and keeps it raised until `irq_clr`.
Triggers that arrive while `irq` is raised are ignored.

**Host software** (not part of this RTL) reads the samples. It estimates hit
rates for different way counts and line sizes, and writes the reconfiguration
registers:

- `RR_PERM`: a new owner for every way;
- `RR_LINE`: a new `m` for every L1.

It then writes `apply`.

**Reconfiguration controller.** It applies the new configuration in four
states:

1. **HOLD:** stops firing and waits until runahead has ended and every L1 is
   idle.
2. **FLUSH:** each L1 writes back and invalidates two kinds of ways: ways that
   change owner, and all its ways when its line size changes.
3. **FWAIT:** waits for the flushes to finish.
4. **WRITE:** writes the permission registers one way per cycle, and the line
   sizes.

Firing then resumes.

## Host register map (`mmio_regs`)

`bus_*` is a simple 20-bit-address, 32-bit-data register bus with no wait
states. Register reads return data on the same cycle.

| address | register |
|---|---|
| 0x00 | CTRL {mon_en, ra_en, run} |
| 0x04 | CMD (write 1 to pulse): bit 0 apply, bit 1 clear irq, bit 2 restart |
| 0x0C | CTX_LEN (contexts per iteration) |
| 0x10 | ITER_LIMIT (stop after this many fires) |
| 0x14 / 0x18 / 0x1C | TR (default 16) / MON_WIN (1024) / TRK_WIN (1024) |
| 0x40 + 4k | RR_PERM, 8 ways x 4 bits per word |
| 0x60 | RR_LINE, 2 bits per L1 |
| 0x80..0x8C | configuration word staging (4 x 32 bits) |
| 0x90 | commit staged word, wdata = {pe, ctx[2:0]} |
| 0x100 + 4i | statistics, see below |
| 0x200 + 4k | current permission registers (read) |
| 0x280 + 4p | tracker sample count of memory PE p |
| 0x1xxxx | tracker samples: pe = addr[11:9], index = addr[8:3], addr[2] selects address or time |
| 0x2xxxx | SPM load/read: spm = addr[14:11], word = addr[10:2] |

Statistics:

| index | counter |
|---|---|
| 0 | fires |
| 1 | cycles |
| 2 | stall cycles |
| 3 | runahead entries |
| 4 | runahead cycles |
| 5 | L1 misses |
| 6 | L1 accesses |
| 7 | contention cycles |
| 8 | misses in the last monitor window |
| 9 | L2 hits |
| 10 | L2 misses |
| 11 | {reconfig busy, irq, runahead, done} |
| 12 | tracker triggers |
| 13 | reconfigurations |
| 14 | restores |
| 15 | stall-on-miss cycles with runahead off |

Main memory is outside the design. The `mrd_*`, `mrs_*` and `mwr_*` ports of
`cgra_top` connect to it: tagged 128 B line reads, and line writes with a
segment mask.

## Simulating

Every testbench checks its own results and ends with
`TB_RESULT checks=N failures=M`. Build one with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/cgra_pkg.sv tb/main_memory_model.sv tb/tb_cgra_top.sv \
  --top-module tb_cgra_top -Mdir obj_top
./obj_top/Vtb_cgra_top
```

Other modules are found through `-Irtl`. `tb/main_memory_model.sv` is needed
only by `tb_cgra_top`, `tb_l1_cache_ctrl` and `tb_l2_cache`.

`tb_cgra_top` builds the full-size system with default parameters. It loads a
4-context gather-sum kernel: over 160 iterations it reads an index stream and
gathers 4-byte features from a 1 MB table. It also writes an output stream
with a 256 B stride. It runs the kernel three times and checks the final sums
each time:

| run | setup | cycles |
|---|---|---|
| A | no runahead | 9543 |
| B | runahead | 2314 |
| C | runahead, plus a monitor-triggered reconfiguration | 3011 |

Run C is driven by the testbench acting as host. It moves ways 16..31 to L1 0
and sets its line to 128 B.

The testbench also counts how often each mechanism occurred. A mechanism that
never occurred counts as a failure. The mechanisms are:

- dropped dummy requests;
- temporary-store hits;
- prefetches;
- store-buffer merges;
- writebacks;
- contention;
- L2 hits and misses;
- MSHR merges.

## Where this design departs from the paper

- **No multi-hop routing.** HyCUBE routes a value across several PEs in one
  cycle. Here a value moves one PE per context.
- **Separate temporary store.** The paper keeps runahead store data in a
  partition of the SPM. Here a separate 16-entry store is used.
- **Loads retry instead of being answered by the LST.** A missed load is
  re-issued after its fill, and hits. The LST records misses and is released on
  fill, but it does not carry the data back.
- **Prefetches take no LST entry.**
- **32 B physical L1 line.** The paper gives only the 64 B default line. 32 B
  was chosen so that 32/64/128 B virtual lines are possible.
- **Fixed SPM address range.** Addresses below 2048 go to the crossbar's SPM.
  Everything else is cached.
- **An L1 that owns no ways cannot fill.** Its misses retry until it owns ways
  again.
- **Re-execution after runahead.** Execution restarts at the saved context, so
  stores of that context are issued again. They write the same data, so the
  results are unchanged.
- **Requests are gated while the array is not running.**
- **A line-size change flushes all of that L1's ways.**
- **The host side is not built.** The reconfiguration algorithm, its memory
  model and the host CPU are software or external. So are the DMA engine and
  main memory. The testbench models main memory with a fixed 78-cycle latency.
- **Sizes the paper does not give are this design's own.** These are: 8
  contexts, a 16-entry LST, an 8-entry store buffer, a 16-entry temporary
  store, a 16-entry L2 memory queue, 64 tracker samples per PE, the monitor
  defaults, and the register map.
