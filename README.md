# Malekeh: a register-file cache built into the operand collectors of a GPU sub-core

A GPU register file is large, so it is split into a few single-ported banks.
Instructions often need two operands from the same bank. Those reads then
happen one after another, and the instruction waits. Each register is 128
bytes wide (32 threads × 4 bytes), so every bank read also costs a lot of
energy.

Modern GPU sub-cores already stage operands in *operand collector units*
(OCUs). An OCU holds one issued instruction until all of its sources have
arrived from the banks. Tensor-core instructions can have six sources, so an
OCU already has six 128-byte operand buffers. Malekeh makes each OCU slightly
larger, with 8 buffers instead of 6, and turns it into a tiny fully
associative cache of the registers of the warp it last served. The result is
called a **caching collector unit (CCU)**.

When the same warp comes back to its CCU, some sources are already there.
Those sources skip the banks: they cost no bank-read energy and cause no bank
conflicts. Three things make such a small cache worth having:

* **Compiler reuse hints.** Each operand of each instruction carries one bit:
  *near* means the value will be read again soon, *far* means it will not.
  Replacement and write-back caching both use this bit.
* **Cache-aware scheduling.** The issue scheduler prefers warps whose data
  are still in a CCU. It sends a warp back to the CCU that holds its data.
  It may briefly hold back a warp rather than evict useful near data.
* **Adaptive waiting threshold (STHLD).** A small state machine sets how long
  the scheduler may hold back. It watches the instruction rate of
  10000-cycle intervals and searches for the largest threshold that does not
  hurt throughput.

This repository is synthesizable SystemVerilog for one streaming
multiprocessor (SM) with this organisation. The default size is 4 sub-cores
and 32 warps. Each sub-core has 2 banks and 2 CCUs, each CCU has 8 entries,
and registers are 1024 bits wide. Each block has a self-checking testbench,
and an end-to-end testbench runs the SM at full size.

## 1. Organisation of one sub-core

```
             warp_ready / warp_instr (from the front end)
                           |
                   +---------------+   STHLD (SM-wide)
                   | issue_scheduler|<----------------- sthld_controller
                   +---------------+
                  alloc |     ^ port R (status of each CCU)
                        v     |
 write-back  +-------------------------+      +--------------------+
 (EUs) ----->|  ccu 0      ccu 1       |----->| dispatch_scheduler |---> EUs
   |  snoop  |  S  D       S  D        |      +--------------------+
   |         +--^--^-------^--^--------+
   |            |  |       |  |   read requests (up to 6 per allocation)
   |         +--+--+-------+--+--+         |
   +-------->|   rf_crossbar      |<--+     v
   |         +---------^----------+   |  +------------+
   |                   | bank data    +--| rf_arbiter |  per-bank FIFOs,
   |         +---------+----------+      +------------+  write filter
   +-------->| rf_bank 0  rf_bank 1|<-------- grants
             +--------------------+
```

* **`rf_bank`**: one single-ported bank of 256 rows × 1024 bits. It does one
  read or one write per cycle, and a read returns one cycle later.
* **`rf_arbiter`**: holds a FIFO of read requests per bank. Writes have
  priority over reads. It also filters write-backs into the CCUs (section 4).
* **`rf_crossbar`**: plain multiplexers. They carry bank read data to the
  requesting CCU's S port, write-back data to the banks, and filtered
  write-back data to each CCU's D port.
* **`ccu`**: the caching collector unit (section 2).
* **`dispatch_scheduler`**: picks a CCU whose operands are all present. The
  oldest allocation goes first. It sends that instruction and its six operands
  to the execution units and frees the CCU.
* **`issue_scheduler`**: chooses the warp and the CCU it is given (section 5).
* **`malekeh_subcore`**: wires the parts above together.
* **`malekeh_sm`**: four sub-cores, an issued-instruction counter, and the
  STHLD controller (section 6).

Registers are spread over the banks as follows:
`bank = (warp + reg) mod 2` and
`row = ((warp / 4) · 64 + reg mod 64) / 2`.
This gives each of the 32 warps 64 registers. 32 warps × 64 registers ×
128 B = 256 KB per SM.

## 2. The caching collector unit

A CCU has four parts:

| part | contents |
|---|---|
| metadata | warp id and the instruction occupying the CCU |
| cache table (CT), 8 entries | valid, 8-bit tag (register id), lock bit, reuse bit (1 = near), 3-bit LRU rank (0 = most recent), 1024-bit data |
| operand collector table (OCT), 6 slots | valid, ready, 3-bit index of the CT entry that holds the slot's operand |
| operand MUXs | each slot's index selects its CT data for dispatch |

The OCT slots hold no data; each one points into the CT. Two sources that
name the same register therefore share one CT entry and one bank read.

The four operations below are each completed at one clock edge. When several
happen in the same cycle, they are applied in the order listed, so later ones
see the effect of earlier ones. Release comes first, then allocation,
snooping, the D write and the S fill.

1. **Allocation** (`alloc_valid`, only while the CCU is free).
   * If the new instruction belongs to a different warp, the CT is flushed.
     Registers are private to a warp, so the old contents are useless.
   * Each valid source is then looked up.
   * A hit marks its slot ready.
   * A miss takes an entry chosen by the replacement policy and sends a bank
     read request `(ccu, entry, warp, reg)` to the arbiter in the same cycle.
   * Every entry the instruction uses is locked and becomes most recently
     used. Its reuse bit is copied from the instruction.
   * The reuse bits of other entries are not aged. Only the new instruction's
     registers are updated, a deliberate simplification.
2. **S port** (bank data arrives). The value is written into the entry named
   by the arbiter's routing tag, and every OCT slot pointing at that entry
   becomes ready.
3. **D port** (a near write-back of this CCU's warp). If the register is
   present, its entry is updated. Otherwise an unlocked entry is replaced.
   The entry takes the write's reuse bit and becomes most recently used. It is
   *not* locked, because no pending instruction needs it.
4. **Dispatch**. `disp_ready` is high once every valid slot is ready.
   `disp_ack` frees the CCU and clears all locks. The cached data stay.

### Replacement

The policy applies these rules in order:

1. Locked entries are never chosen.
2. If there is an invalid entry, it is taken. The original proposal does not
   cover this case; the design adds it because an empty entry evicts nothing.
3. Otherwise a *far* entry is chosen at random. A 16-bit LFSR gives a
   starting point for a circular search.
4. Otherwise the least-recently-used entry is taken.

Far values are expected not to be read again soon, so they are evicted before
near ones. LRU decides among the near values.

A victim can always be found:

* An instruction locks at most 6 entries, so 2 of the 8 are always free to
  replace.
* A D write can always find a victim.
* An allocation can always place its up to six misses.

### Port R (status to the scheduler)

Each CCU reports four values to the issue scheduler:

* `busy`
* `warp`, the warp whose data it holds
* `has_data`: busy, or at least one valid entry
* `has_near`: at least one valid near entry

## 3. Bank arbitration

Every cycle the arbiter does the following:

1. Grants each bank to at most one write-back. If two write-back ports target
   the same bank, the lower-numbered port wins and the other sees
   `wb_ready = 0` and retries.
2. For each bank not being written, looks at the **oldest** request in that
   bank's FIFO. It is granted only if no other bank has already been granted a
   read for the same CCU this cycle, since a CCU's S port takes one value per
   cycle. Banks are examined in order, bank 0 first.
3. Pushes the new requests of an allocation, up to six, into the FIFOs in
   source order. Each FIFO holds 2 × 6 = 12 entries, one per operand slot of
   every CCU, so it cannot overflow. An assertion checks this.

A granted read happens at the clock edge. The routing (which CCU, which CT
entry) is registered alongside, so that when the data leave the bank one
cycle later the crossbar sends them to the right S port.

## 4. Write-backs, and keeping cached copies correct

Every write-back is written to its bank: the banks always hold the
architectural value. The arbiter then decides which CCU copies to update:

* A write is forwarded to a CCU's D port only if that CCU holds the writing
  warp (`has_data` and matching `warp`) and the write's reuse bit is *near*.
* A CCU has one D port. If several near writes for it are accepted in one
  cycle, the lowest-numbered port wins.
* Far writes are not forwarded. They are counted on `ev_far_squashed`.

Filtering alone would allow a stale hit. Suppose register r5 of warp 3 is
cached in CCU 0. A later instruction of warp 3 then writes r5 with a *far*
hint. The bank gets the new value, but CCU 0 still holds the old one, and the
next instruction of warp 3 that reads r5 would hit on stale data.

To prevent this, each CCU also watches every accepted write-back (`wb_fire`,
`wb_req`). When a write of its warp bypasses its D port, the CCU invalidates
any unlocked entry with the same register id. That covers a far write and a
write that lost the D-port choice. This snooping is this design's addition;
the original proposal states the filtering rules but does not say how stale
copies are avoided.

Two conditions are assumed of the surrounding pipeline:

* The scoreboard does not issue an instruction whose sources still have a
  write outstanding. A write-back therefore never targets a locked entry.
* A warp's data live in at most one CCU. The issue scheduler guarantees this
  (section 5).

## 5. Issue scheduling and CCU allocation

Each sub-core issues at most one instruction per cycle. A warp can be issued
only if it is ready (`warp_ready`) and the allocation policy grants it a CCU.

**Warp priority.**

1. The warp that issued most recently (as in greedy-then-oldest scheduling).
2. Warps that have data in a CCU, oldest first.
3. All other warps, oldest first.

The first warp in this order whose allocation succeeds is issued. The lower
local warp index counts as older.

**Allocation.** The outcome for each ready warp comes from the CCUs' port R.
The case numbers are the ones used in the literature on this design:

| case | condition | result |
|---|---|---|
| 3 | the warp has data in a CCU, and that CCU is free | allocate that CCU |
| 4 | the warp has data in a CCU, and that CCU is busy | no allocation (it never goes to a second CCU) |
| 5 | no data; some free CCU has no near value | allocate one such CCU at random |
| 6 | no data; no CCU is free | no allocation |
| 7 | no data; free CCUs all hold near values; wait counter < STHLD | no allocation; the counter counts this cycle (case 8) |
| 9 | as case 7, but counter ≥ STHLD | allocate a random free CCU and reset the counter |

Case 4 keeps a warp's registers in a single CCU. Hardware coherence between
CCUs is therefore never needed.

Case 7 deliberately leaves an issue slot empty for a while. During that time
an older warp that owns the near data may become ready again and reuse them.

The counter advances on a cycle in which nothing was issued and at least one
ready warp met case 7. It saturates. It is per sub-core, while STHLD is shared
by the SM.

`issue_case` reports the outcome for the chosen warp, or for the
highest-priority blocked warp. `cases_seen` flags every outcome met by some
ready warp that cycle; it is for counting only.

## 6. Adaptive STHLD

`sthld_controller` counts the instructions issued by all four sub-cores. The
count is kept per interval of `INTERVAL = 10000` cycles. The intervals have
equal length, so the count ratio equals the IPC ratio.

At the end of each interval it compares the new count with the previous one.
The change is *large* (L) if `50 · |cur − prev| > prev`, that is above 2 %,
and *small* (S) otherwise. The state machine then moves and adds the delta
shown to STHLD:

| from | on S | on L |
|---|---|---|
| 1 (start) | → 2, +1 | → 2, +1 |
| 2 | → 2, +1 | → 3, +1 |
| 3 | → 2, +1 | → 4, −2 |
| 4 | → 2, +1 | → 5, −1 |
| 5 | → 6, +1 | → 5, −1 |
| 6 | → 6, 0 | → 3, +1 |

This is how to read the table:

* While throughput is flat (state 2), the threshold keeps rising, since
  waiting longer buys hit ratio.
* A large change is first met with a speculative further increase (state 3).
  This pays off if a new program phase tolerates more waiting.
* If the change persists, the controller backs off by 2 and then by 1 per
  interval (states 4 and 5).
* After a back-off, one step up is tried (5 → 6). It stays there (6, S, 0)
  until the next large change.

STHLD starts at 0 and saturates at 0 and at 255.

## 7. Timing

All state changes at the rising clock edge, and the reset `rst_n` is
asynchronous and active low. From issue (cycle t, the allocation edge) to the
cycle in which `disp_ready` is high:

| operand source | ready at | path |
|---|---|---|
| all hits | t + 1 | allocation edge sets the slots ready |
| a miss with no conflict | t + 3 | request enters FIFO (t) → bank read granted (t+1) → data on S port, written into CT (t+2) → ready (t+3) |
| a miss behind a bank conflict or a write | later by one cycle per wait | each FIFO grants one read per cycle |

Dispatch happens in the cycle `disp_ready` is high if the EUs accept it
(`eu_ready`). The CCU is free after that edge; because the scheduler reads the
registered port R, it can be allocated again in the following cycle.

## 8. Top-level interface (`malekeh_sm`)

The execution units, the instruction buffer and scoreboard, and the compiler
that produces the reuse hints are outside the design. Their signals are ports,
all arrays indexed by sub-core.

| port | dir | meaning |
|---|---|---|
| `warp_ready[s][w]`, `warp_instr[s][w]` | in | per local warp: has a ready instruction, and that instruction (`instr_t`: opcode, EU, 6 source and 2 destination register ids with valid and near bits) |
| `issue_valid[s]`, `issue_lwarp[s]` | out | an instruction of local warp `issue_lwarp` was issued this cycle; the front end advances that warp |
| `eu_valid/eu_ready/eu_warp/eu_instr/eu_operands[s]` | out/in | dispatch to the execution units, six 1024-bit operands |
| `wb_valid/wb_req/wb_data[s][p]`, `wb_ready[s][p]` | in/out | two write-back ports per sub-core; `wb_req` = warp, register, reuse bit; hold until `wb_ready` |
| `sthld`, `sthld_state`, `interval_end`, `large_change` | out | controller state |
| `ccu_ev`, `issue_case`, `cases_seen`, `read_blocked`, `far_squashed` | out | per-cycle event pulses for performance counters |

Warp ids are SM-wide (5 bits): `warp = local_index · 4 + sub-core`.

## 9. Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_SUBCORES` | 4 | sub-cores per SM |
| `NUM_WARPS` | 8 | warps per sub-core (32 per SM) |
| `NUM_CCU` | 2 | CCUs per sub-core |
| `NUM_BANKS` | 2 | banks per sub-core |
| `NUM_WB` | 2 | write-back ports per sub-core (a choice of this design) |
| `DATA_W` | 1024 | register width in bits |
| `CT_ENTRIES` | 8 | cache-table entries per CCU (6 operand slots + 2) |
| `REGS_PER_WARP` | 64 | registers per warp held by the banks |
| `INTERVAL` | 10000 | STHLD interval in cycles |
| `STHLD_W` | 8 | width of STHLD and of the wait counter |

Operand slot count (6), destination count (2), tag width (8) and warp-id
width (5) are constants in `malekeh_pkg`.

## 10. What follows the original design and what does not

These follow the published description: the structure of the sub-core, the
CCU fields and their sizes, the four CCU operations, the replacement order,
near-only write caching with one D port, the warp priority, the six
allocation outcomes, the six-state STHLD machine with its deltas, the 2 %
rule and the 10000-cycle interval.

These are this design's own choices:

* invalidation of stale copies by snooping write-backs (section 4);
* preferring an invalid entry in replacement;
* the register-to-bank mapping;
* one-cycle bank latency;
* two write-back ports, with the lowest port winning;
* bank order in read grants;
* oldest-first dispatch, and age = warp index;
* the exact event on which the wait counter advances;
* LFSRs as the random source;
* STHLD's start value and saturation;
* one STHLD controller per SM, where the original shares one per GPU (sum
  the SMs' issue counts to share it).

Not included:

* the execution units;
* the instruction buffer and scoreboard;
* the compiler pass that computes reuse distances (a register is marked near
  when its next use is within 12 instructions).

The hints arrive as bits in `instr_t`.

Bank mapping limit: the banks give each warp 64 registers. A register id
above 63 aliases onto `reg mod 64` in the banks, though the 8-bit CT tag keeps
them apart. Kernels that need more registers per thread at full occupancy
need a different mapping.

## 11. Verification

Every block has a testbench in `tb/` that checks the block against an
independent model and prints `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_rf_bank` | read-after-write, read latency, random traffic |
| `tb_rf_crossbar` | every routing path, random |
| `tb_rf_arbiter` | cycle-accurate reference model of FIFOs, write priority, S-port rule, write filter, under random traffic |
| `tb_ccu` | directed: hits, misses, duplicate sources, hit latency, D-port update and allocation, invalidation, flush, far-then-LRU replacement order |
| `tb_dispatch_scheduler` | oldest-ready choice and operand muxing against a model (4 CCUs) |
| `tb_issue_scheduler` | warp priority and all allocation cases against a model |
| `tb_sthld_controller` | a count sequence walking every edge of the state machine (short interval) |
| `tb_malekeh_subcore` | one sub-core end to end; hit latency 1 cycle and miss latency 3 cycles |
| `tb_malekeh_sm` | whole SM at default parameters |

The end-to-end test `tb_malekeh_sm` plays the surroundings:

* random per-warp programs over 16 registers, including occasional
  six-source, two-destination instructions;
* random reuse bits;
* a scoreboard;
* execution units with 1 to 12 cycles of latency;
* a golden register file.

Every dispatched operand is compared with the golden value, so a stale or
misplaced cache entry is caught.

The number of active warps alternates every 10000 cycles, so the STHLD
controller sees large changes. The test requires each of 19 mechanisms to
occur: hits, misses, flushes, both replacement kinds, D updates and
allocations, invalidations, far-write squashing, held-back reads, write-port
conflicts, all six allocation outcomes, the interval timing, and a large
change.

In a 42000-cycle run:

* 55972 instructions were issued and dispatched.
* About 34 % of source operands hit in a CCU.

That number reflects the random test programs, not real kernels.

## 12. Simulating

Compile the package first; the other modules are found through `-y rtl`:

```
verilator --binary --timing --assert -y rtl rtl/malekeh_pkg.sv \
    tb/tb_malekeh_sm.sv --top-module tb_malekeh_sm -o sim
./obj_dir/sim
```

Use the same command with another testbench name for the block tests. The
full-size SM test builds in about a minute and runs in a few seconds. The
testbenches use only `$urandom`, so they need no constraint solver.
