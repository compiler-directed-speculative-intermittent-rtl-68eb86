# Speculative intermittent computation: a store-buffer subsystem for energy-harvesting MCUs

## The idea

A battery-less microcontroller runs from harvested energy. It loses power
many times a second and must resume without corrupting the nonvolatile
main memory (FRAM) it computes in. Two standard fixes both cost a lot:

- Checkpointing whenever a voltage monitor predicts an outage needs the
  monitor, extra capacitance and nonvolatile flip-flops.
- Writing every store straight to FRAM and re-executing idempotent
  regions makes every store slow and needs undo or redo logging.

This design takes a third route. The compiler cuts the program into
**regions**, each holding at most half a store buffer's worth of stores.
Stores of the running region never touch FRAM. They collect in a small
**volatile store buffer (SB)**. Execution inside the region is therefore
*speculative*: if power fails, the SB contents simply vanish, FRAM still
holds the state at the start of the region, and the core restarts that
region from its recovery PC.

At the end of a region the buffered stores are made durable by a
**two-phase release**:

1. **Phase 1.** The SB half of the region is copied into a *proxy
   buffer* in FRAM. Then the `isDrain` check bit is set.
2. **Phase 2.** The proxy buffer is copied to the primary addresses.
   Then `isComplete` is set.

A power failure in phase 1 leaves the primary data untouched, so the
region is rerun. A failure in phase 2 is repaired at power-on by doing
phase 2 again from the proxy buffer. A failure anywhere else finds both
bits set and simply reruns the interrupted region. The compiler stores the
next region's recovery PC and live registers as ordinary stores before the
boundary, so they become durable in the same release.

Three refinements sit on top:

- **ILP overlap.** The SB is split into two halves, and consecutive
  regions alternate between them. While the just-ended region's half is
  released in the background, the core already runs the next region in
  the other half.
- **Compiler-directed SB bypass.** A load that the compiler has proved
  cannot alias a buffered store carries a flag in bit 0 of its address. It
  goes straight to FRAM. Other loads search the SB sequentially, one
  entry per cycle, while the FRAM read runs alongside.
- **Adaptive stagnation avoidance.** A region longer than the on-time
  between outages would rerun forever. After repeated failures in the same
  region, a watchdog timer is switched on. When it expires, the core is
  stopped, its registers and PC are written into the *idle* SB half, and
  both halves are released. Execution can then resume mid-region. Each
  further failure halves the timer period. After a run of failure-free
  regions, ILP returns and the watchdog is switched off.

## What is in the RTL

`rtl/cospec_top.sv` is the memory-side subsystem that sits between an
unmodified in-order core and its FRAM. The core, the FRAM, the energy
harvester and the compiler are outside it. Their signals are ports of the
top.

| File | Role |
|---|---|
| `cospec_pkg.sv` | Widths, memory request/response structs, event record, NVM address map |
| `store_buffer.sv` | Two halves of `SB_ENTRIES/2`; per-half append and invalidate; sequential search; drain read port |
| `load_path.sv` | Bypass loads go to FRAM; other loads search the SB while FRAM is read, and a hit wins |
| `spec_ctrl.sv` | Region-boundary sequencer: half switching, ILP waits, non-ILP waits, watchdog register checkpoint |
| `release_ctrl.sv` | Two-phase release engine, with redo of phase 2 |
| `dma_engine.sv` | Single-channel memory-to-memory copy used for phase 2 |
| `watchdog_timer.sv` | Period counter, paused during releases |
| `adapt_ctrl.sv` | ILP on/off, watchdog on/off and period; state kept in FRAM |
| `recovery_ctrl.sv` | Power-on sequence: check bits, redo, recovery PC, policy record |
| `nvm_arbiter.sv` | Fixed-priority sharing of the one FRAM port |

All defaults are the main configuration of the scheme:

- a 40-entry SB, i.e. two halves of 20;
- 16 core registers (the MSP430 register file);
- ILP and DMA enabled.

## The store buffer and its two halves

Each store entry holds an address and a data word. A store is appended to
the half that `spec_ctrl` names as current. A repeated address takes a new
entry: there is no merging.

A search scans the current half from the youngest entry down, then the
other half, so the youngest matching store wins. The scan looks at one
entry per cycle. A full search of 40 entries takes at most 43 cycles. The
other half is included because, with ILP, it still holds the previous
region's stores until that region's release is confirmed and the next
boundary empties it.

Halves are emptied whole, in one cycle. An append to a full half is a
compiler contract violation. It raises `sb_overflow`, trips an assertion
and drops the store.

## Region boundaries (`spec_ctrl`)

The core raises `rb_req` and holds it until `rb_done`. What happens next
depends on the policy.

- **ILP on, no release pending.** The ended half is handed to the release
  engine. The half left over from the region before, whose release has
  finished, is emptied. The core switches to it and continues. This costs
  one cycle.
- **ILP on, previous release still running.** The core waits at the
  boundary until that release finishes, then does the switch above. This
  is the only place where ILP can stall: the next region must never write
  into a half that is still being drained.
- **ILP off.** The core waits at every boundary for both phases of its own
  release, and the half is emptied afterwards.
- **Watchdog expiry.**
  1. Between boundaries, with no release running, the controller raises
     `core_hold` and waits for `core_idle`.
  2. It empties the idle half and writes `NREGS` registers and then the PC
     into it, addressed to the register checkpoint area.
  3. It releases both halves, the region's own half first, so the register
     values are the last ones written.
  4. When phase 2 has finished, it empties both halves and releases the
     core.

  The watchdog counts only while the core runs and no release is in
  progress.

## Release engine (`release_ctrl`)

Phase 1 goes over the selected halves and writes, for entry *k*, the
address word to `PROXY_BASE + 8k` and the data word to `PROXY_BASE + 8k + 4`.
It then writes the entry count to `PROXY_CNT_ADDR`. Last, it writes the
check word `FLAG_ADDR` = 1: `isDrain` is bit 0 and `isComplete` is bit 1.

Phase 2 reads the count and every proxy pair back from FRAM. For each
pair it writes the data to its address: directly, or through one
single-word DMA command per entry when `dma_en` is set. It then writes the
check word as 3.

Phase 2 works from FRAM, not from the SB, so a phase-2 redo after a power
failure runs the identical sequence with an empty SB.

FRAM traffic for *n* entries is:

- phase 1: 2n + 2 writes;
- phase 2: 2n reads and n + 1 writes.

The testbenches check these counts exactly. Every access costs its
latency plus one accept cycle. With 1-cycle reads, 3-cycle writes and
1-cycle DMA writes, phase 2 takes:

- 9n + 5 cycles when the engine copies;
- 7n + 5 cycles through the DMA channel.

The DMA command goes out in the same cycle the target address arrives,
and the DMA engine signals done with its last write.

Both bits live in one word, which FRAM writes atomically. As a result, a
failure during phase 1 leaves the previous value 3 (or 0 on a blank
memory). Recovery then treats it like a failure in mid-region, which is
the correct action. Only the pattern drain = 1, complete = 0 means "redo
phase 2". A one-bit variant is also possible. It was not used.

## Power-on (`recovery_ctrl`) and the adaptive policy (`adapt_ctrl`)

A power failure is `rst_n` low. Every register here is volatile, and FRAM
keeps its contents. After reset the recovery controller:

1. reads the check word, and if it is 1, starts a phase-2 redo and waits
   for it;
2. reads the recovery PC from the word after the register checkpoint
   area;
3. reads the two-word policy record;
4. writes the updated record back and loads it into `adapt_ctrl`;
5. raises `sys_ready`.

The core then restores its registers from `RF_CKPT_BASE + 4*i` and jumps
to `recovery_pc`. Until `sys_ready`, `core_hold` is high.

The policy record has a status word and a PC word. The status word holds
valid (bit 31), watchdog on (bit 30), halving count (bits 12:8) and
failures in a row in the same region (bits 7:0). The PC word holds the
recovery PC of the last failure. Two failures count as "in the same
region" when their recovery PCs are equal.

On every power-on:

- ILP is off.
- The watchdog is switched on when the same-region count exceeds 2.
- Once the watchdog is on, every further failure halves the period, down
  to `WDT_MIN`.

After `GOOD_REGIONS` completed releases without a failure, the policy
relaxes: ILP is allowed again, the watchdog is off, and the record is
rewritten.

## Memory map (in `cospec_pkg`)

| Address | Content |
|---|---|
| `0x1000 + 4i` | register *i* checkpoint; `0x1000 + 4*NREGS` recovery PC |
| `0x1100` | check word (bit 0 isDrain, bit 1 isComplete) |
| `0x1104` | proxy entry count |
| `0x1108`, `0x110C` | adaptation record status and PC |
| `0x1200 + 8k` | proxy entry *k*: address, then data |

## Interfaces and timing

- **Memory ports** (`mem_req_t`/`mem_rsp_t`). The master holds `req` with
  `we`/`addr`/`wdata` until a one-cycle `done`, which carries `rdata` for
  reads. The `dma` flag marks DMA-channel transfers, which the memory
  serves faster (`DMA_X`, default 4, in the model). The FRAM model in `tb/nvm_model.sv` takes 1 cycle for a read and
  3 for a write. These are the 20 ns / 120 ns latencies at a 25 MHz clock,
  with the read rounded up to a whole cycle. Any latency works.
- **Arbiter.** The arbiter adds no cycle. Priority is load, release, DMA,
  recovery, record, and a grant is kept until `done`.
- **Load latency.**
  - A bypass load takes the FRAM read plus 2 cycles.
  - A searched load starts the SB search and the FRAM read together. It
    takes the longer of the two (search up to n + 3 cycles) plus 2
    cycles, so a miss costs no more than a hit.
- **Core interface.** Stores are one-cycle `st_valid` pulses. Loads hold
  `ld_req` until `ld_done`.

## Where this design departs from the scheme or fills gaps

- **Search speed.** The search compares one entry per cycle. The scheme
  argues that a 40-entry sequential search fits within one FRAM access
  (sub-cycle), which this RTL does not achieve. The search does run in
  parallel with the FRAM read, so only a search longer than the read
  (more than a few occupied entries) adds latency.
- **DMA speed.** The faster DMA rate is a property of the MCU's memory
  system, so it lives in the FRAM model. The DMA engine only flags its
  transfers. At a 25 MHz clock the 2X–5X speed-ups collapse to whole
  cycles. A 3-cycle write becomes 2 cycles at 2X and 1 cycle at 3X, 4X
  and 5X. Reads are 1 cycle in every case.
- **Own choices.** The following are this design's own and were not taken
  from the scheme:
  - the proxy buffer layout and address map;
  - the single check word;
  - the arbiter priority;
  - all handshakes;
  - "same region = same recovery PC";
  - the policy record format;
  - the timer values `WDT_INIT` = 16384 and `WDT_MIN` = 256 cycles;
  - `GOOD_REGIONS` = 16.
- **Register restore.** Restoring registers and jumping to the recovery
  PC is left to the core. The subsystem only supplies `recovery_pc` and
  `sys_ready`.
- **Not built.** The core, the FRAM macro, the harvester and capacitor,
  and the compiler's region formation and alias analysis are not built.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The end-to-end test is
`tb/tb_cospec_top.sv`. It runs the top at its default parameters with a
small core model, which executes a synthetic 100-region program with
stores, searched loads, bypass loads and a deliberately long region.
Power failures are injected:

- during phase 2;
- during phase 1;
- in the middle of a region;
- repeatedly inside the long region, to force the watchdog.

The test checks:

- every load value;
- after every power-on, that FRAM equals the program state at the
  recovery PC, and that the recovery PC never moves backwards;
- the checkpointed registers;
- the final memory;
- that every mechanism above occurred.

`tb/tb_cospec_configs.sv` runs the same environment (`tb/cospec_e2e_bench.sv`)
in three configurations side by side:

- ILP with DMA;
- ILP with phase 2 copied by the release engine;
- neither ILP nor DMA.

It checks that no overlap and no DMA copy happen where they are switched
off. It also checks that the runs finish in that order: DMA before the
engine copy, and ILP before no ILP. The margins are small in this program
(under 2 %), because the deliberately stagnating long region dominates the
run time.

To run any testbench with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cospec_pkg.sv rtl/*.sv tb/nvm_model.sv \
          tb/tb_cospec_top.sv --top-module tb_cospec_top
./obj_dir/Vtb_cospec_top
```

For `tb_cospec_configs`, add `tb/cospec_e2e_bench.sv` to the file list.
(Leave `cospec_pkg.sv` out of the `rtl/*.sv` expansion if your shell
passes it twice.) The top-level run takes a few seconds.
