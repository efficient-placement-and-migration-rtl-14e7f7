# Hybrid SRAM / STT-RAM L1 data cache for intermittently powered processors

A processor that runs from harvested energy loses its supply many times a
second. Everything volatile (registers, SRAM caches) is lost with it, and
work must be redone unless the state is saved in non-volatile memory first.
STT-RAM keeps its contents without power, but a write to it is slow (10
cycles against 2 for SRAM) and costs about a hundred times more energy, so
a cache built only from STT-RAM is slow in normal operation.

This RTL implements an L1 data cache in which **every set mixes SRAM ways
and STT-RAM ways** and the hardware steers each block to the region that
suits it:

* blocks that are written often stay in SRAM, where writes are cheap;
* blocks that are mostly read live in STT-RAM, where they survive a power
  failure and then hit at once, with no restore step;
* when the supply fails, the most valuable SRAM blocks are copied into
  STT-RAM before the power goes, and the rest go to main memory if dirty.

The policies follow the placement, migration and backup scheme published
as *"Efficient Placement and Migration Policies for an STT-RAM based Hybrid
L1 Cache for Intermittently Powered Systems"* (Badri, Saini, Goel). The
microarchitecture around the policies (interfaces, sequencing, cycle
timing) is this implementation's own; the places where it had to interpret
or fill in the policy description are listed in
[Interpretations and departures](#interpretations-and-departures).

## Default configuration

| Item | Value |
|---|---|
| Capacity | 16 KB data, 64-byte blocks |
| Organisation | 64 sets x (2 SRAM ways + 2 STT-RAM ways) |
| Address | 27-bit byte address (128 MB main memory), 32-bit words |
| Per-block bookkeeping | RIC 3 bits, WIC 3 bits, CONF 2 bits (8 bits/block, 2048 bits total) |
| Prediction table | 4096 one-bit entries (4096 bits) |
| Intensity threshold | 7 |
| Latencies (cycles, 2 ns clock) | SRAM read 1 / write 2, STT-RAM read 2 / write 10 |
| Main memory (outside) | phase-change memory, read 35 / write 100 cycles |

The bookkeeping adds 6144 bits, 0.75 KB, about 2.3 % of a 32 KB L1
(data + instruction cache).

## What each block carries

Each way of each set, in either region, holds

| Field | Width | Meaning |
|---|---|---|
| V | 1 | valid |
| D | 1 | dirty (the cache is write-back, write-allocate) |
| RIC | 3 | read-intensity counter: reads since the last reset |
| WIC | 3 | write-intensity counter: writes since the last reset |
| CONF | 2 | confidence: how many times the block has proved read- or write-intensive where it is |
| TAG | 15 | address tag |
| DATA | 512 | the block |

RIC, WIC and CONF are `hc_pkg::meta_t`.

## The policies

### Counting and confidence (`access_policy`)

Every access to a resident block increments RIC (read) or WIC (write).
The access that brings the counter to **7** is a verdict on the block:

* **Wrong region.** A read-intensive block in SRAM, or a write-intensive
  block in STT-RAM, is migrated to the other region, and RIC, WIC and CONF
  all return to zero: the block starts over in its new home.
* **Right region.** A read-intensive block already in STT-RAM, or a
  write-intensive block already in SRAM, stays. CONF advances one step,
  00 -> 01 -> 10 -> 11, and stays at 11. The counter that fired returns to
  zero; the other counter is kept.

So CONF is a small saturating "this block has repeatedly behaved as its
region expects" score. A migration always drops it back to 00. Because the
counter is reset when it reaches 7, a stored RIC or WIC never exceeds 6.

### Placement on a miss (`pred_table`)

The prediction table has one bit per entry, PR ("previous region"), and no
tags. It is indexed by the block address modulo 4096: the low 12 bits of
`address / 64`. PR = 1 means SRAM and PR = 0 means STT-RAM. Every entry is
1 after reset, so a block never seen before goes to SRAM.

On a miss the block is fetched from main memory and placed in the region
its PR entry names. If that region has a free way in the set, the block
takes it. Otherwise the block evicts, from that region only:

* in STT-RAM, the block with the **lowest RIC** (the least read-intensive);
* in SRAM, the block with the **lowest WIC** (the least write-intensive).

Ties go to the lowest way number. The new block's counters start at zero,
and then the access that missed is counted. So a read miss leaves
RIC = 1.

Every PR entry starts at 1, so STT-RAM fills in only two ways: blocks
migrate there after 7 reads in SRAM, or a block that was evicted from
STT-RAM misses again. When a set has few SRAM ways and many competing
blocks, a block can be evicted from SRAM before it reaches 7 reads, and
STT-RAM stays almost unused. `tb_workloads` shows this on the 2:6 splits
under weakly local traffic.

### Replacement and the PR bit

Whenever a valid block is evicted, by a miss or by a migration, its PR
entry is written with the region it leaves: 1 if it was in SRAM, 0 if in
STT-RAM. When that block misses again, it goes back to the region it last
lived in. If the evicted block is dirty, it is written to main memory
before anything else happens.

### Migration on a hit

A migrating block moves in one operation: read from the source way, write
into the destination region, source way freed. If the destination region
of the set is full, its victim is chosen as for a miss (lowest RIC into
STT-RAM, lowest WIC into SRAM). The victim is written back if dirty, and
its PR entry is updated. The written word of a write hit is merged into
the block as it moves. The block keeps its dirty bit.

### Backup on power failure (`backup_select`)

When `pwr_fail` rises and no request is in flight, the controller walks
the sets one by one and repeats one step per set until no valid SRAM block
is left:

1. Take the valid SRAM block with the **highest CONF**, in the order
   11 > 10 > 01 > 00.
2. Find the STT-RAM way of **lowest priority** that this backup has not
   already filled: an empty way first, else the block with the lowest CONF.
3. If that way is empty, or its CONF is not higher than the SRAM block's,
   copy the SRAM block into it. The displaced STT-RAM block is written to
   main memory if dirty, and the saved block's counters restart at zero.
   At equal CONF the SRAM block wins, because SRAM is about to be lost.
4. Otherwise the SRAM block is written to main memory if dirty, and simply
   lost if clean.

Then the SRAM contents are cleared (this models their loss), `pwr_off`
rises, and the cache waits for `pwr_fail` to fall. Nothing is restored
when power returns. The saved blocks are in STT-RAM and just hit, and they
move back to SRAM later by the normal migration rule if they are written
often.

Each saved block costs one SRAM read plus one STT-RAM write (11 cycles).
Each block sent to memory costs a memory write (100 cycles). The worst case
for the default size is therefore about 64 x 2 x 112, roughly 14,600
cycles, or 29 us.

## A worked trace

The controller testbench replays the following trace on one set and checks
every number listed here. At the start, SRAM holds blocks a and c, STT-RAM
holds b and d, every counter is zero, and PR(c) = 1, PR(e) = 0. Counters
are written [RIC, WIC, CONF].

| After | What happens | State |
|---|---|---|
| rd a x2 | counting | a [2,0,00] |
| wr b x2 | counting (STT-RAM write, 11 cycles each) | b [0,2,00] |
| rd a, rd c, wr a | counting | a [3,1,00], c [1,0,00] |
| wr b x5 | the 5th brings WIC(b) to 7 while b is in STT-RAM: migrate to SRAM, which is full; c has the lowest WIC and is evicted; PR(c) := 1 | SRAM {a, b [0,0,00]}, STT-RAM {empty, d} |
| wr b x2, rd a x4 | RIC(a) reaches 7 in SRAM: migrate into the free STT-RAM way | SRAM {empty, b [0,2,00]}, STT-RAM {a [0,0,00], d} |
| rd a x4 | counting in STT-RAM | a [4,0,00] |
| wr c x7 | c misses, PR(c) = 1 places it in the free SRAM way; the 7th write finds it already in SRAM: CONF 00 -> 01 | c [0,0,01] |
| wr c x3 | counting | c [0,3,01] |
| rd e | e misses, PR(e) = 0 -> STT-RAM, full; d has the lowest RIC, evicted; PR(d) := 0 | e [1,0,00] |
| power fails | c (CONF 01) goes first and displaces a (dirty, written to memory); then b (00) displaces e (00, clean) | STT-RAM {c [0,0,00], b [0,0,00]}, SRAM lost |
| power back, rd b, rd c | both hit in STT-RAM with their last written data; no memory reads | b [1,0,00], c [1,0,00] |

## Timing and interfaces

All signals are synchronous to `clk`, and `rst_n` is an asynchronous
active-low reset.

**Processor port.** A request (`req_we`, `req_addr`, `req_wdata`) is taken
in a cycle where `req_valid` and `req_ready` are both high. One request is
in flight at a time. `resp_valid` pulses for one cycle with `resp_rdata`,
the addressed word (for a write, the word just written). The cycle after
acceptance compares the tags of both regions. Then the array latency
follows, so a hit answers this many cycles after acceptance:

| Hit | Cycles |
|---|---|
| SRAM read | 1 + 1 = 2 |
| SRAM write | 1 + 2 = 3 |
| STT-RAM read | 1 + 2 = 3 |
| STT-RAM write | 1 + 10 = 11 |
| migration | 1 + source read + destination write (STT->SRAM 5, SRAM->STT 12) |
| miss | 1 + [write-back] + memory request handshake + memory read + destination write |

With the 35-cycle memory model and no write-back, a miss into SRAM answers
after 39 cycles and a miss into STT-RAM after 47. `req_ready` is low while
`pwr_fail` is high, so a request arriving during a power failure waits
until power returns.

**Memory port.** The port moves one whole block per request, addressed by
block number (`address / 64`, 21 bits). A request is taken on
`mem_req_valid && mem_req_ready`. For a read and a write alike, the memory
answers with a one-cycle `mem_resp_valid`, carrying `mem_resp_rdata` for a
read. The cache never has more than one memory request outstanding. An
assertion flags a response without a request.

**Power.** `pwr_fail` comes from a supply monitor outside the cache.
`bk_busy` is high during the backup and `pwr_off` once it has finished.

**Events.** `ev` (`hc_pkg::cache_events_t`) pulses one bit for each hit,
miss, array read or write per region, migration in each direction, CONF
step, replacement, PR update, memory read or write, block saved, block
sent to memory or dropped in a backup, and backup cycle. The energy and
efficiency figures used to evaluate such a cache can be computed from these
counts: STT-RAM writes, main-memory writes, backup time, and backup
efficiency = STT-RAM writes / (STT-RAM writes + memory writes) during the
backup.

## Structure

```
hybrid_l1_cache            top: wires the parts below
 |- hl1_ctrl               request / miss / migration / backup state machine
 |   |- access_policy x2   counter and CONF update (hit; access after a fill)
 |   |- way_select x2      replacement victim: SRAM by WIC, STT-RAM by RIC
 |   `- backup_select      backup step decision
 |       `- way_select x2  highest-CONF SRAM block, lowest-priority STT-RAM way
 |- pred_table             4096 x 1-bit previous-region table
 |- cache_region (SRAM)    VOLATILE = 1: cleared when power is lost
 `- cache_region (STT-RAM) VOLATILE = 0: keeps its contents
hc_pkg                     field widths, threshold, latencies, meta_t, events
```

The controller's states are IDLE, LOOKUP, then as needed WB_REQ/WB_WAIT
(victim write-back), FILL_REQ/FILL_WAIT (miss), ARRAY (waits for the
array latency and commits all array writes on its last cycle), and for a
power failure BK_SCAN, BK_WB_REQ/BK_WB_WAIT, BK_ARRAY and OFF. Every
decision (hit way, victim, PR write, new counters) is made in LOOKUP from
the set as it is then, and applied at the end of ARRAY. No other operation
touches the set in between.

The arrays are register arrays that read a whole set combinationally. They
stand in for the SRAM and STT-RAM macros. The technology latencies are
counted by the controller, so a real macro with a registered read can
replace them without changing the policy logic.

## Parameters

`hybrid_l1_cache` takes `ADDR_W` (27), `WORD_W` (32), `CACHE_BYTES`
(16384), `BLOCK_BYTES` (64), `SRAM_WAYS` (2), `STT_WAYS` (2), `L` (4096) and
`THRESH` (7). Sets, tag width and index widths are derived from them.
Constraints:

* Each region needs at least 2 ways.
* `SETS` and `L` must be powers of two.
* `L` must not exceed the number of blocks in the address space.
* `THRESH` may be 1 to 7 with the 3-bit counters of `hc_pkg`. A threshold
  of 15 needs `CNT_W = 4` there.

The array latencies are parameters of `hl1_ctrl` with defaults from
`hc_pkg`.

## Interpretations and departures

The published description leaves some points open and contradicts itself
on others. This implementation resolves them as follows.

* **When the threshold fires.** The pseudo-code tests `counter ==
  threshold` before incrementing. The published worked example migrates a
  block on the access that *brings* the counter to 7. The example is
  followed, which decides one access earlier.
* **What PR records.** One passage says PR stores the block's most recent
  region, and the worked example agrees. Another says PR = 1 means "WIC
  was greater than RIC at replacement". The first is followed. In the
  example, block c is evicted from SRAM with RIC 1 > WIC 0 and still
  returns to SRAM.
* **CONF on migration.** The read-hit pseudo-code places `CONF + 1` after
  the migration branch. The prose and the state diagram reset CONF to 00
  on a migration, and that is what is built.
* **A saturated CONF.** The prose says that once CONF is 11 the counter
  that reaches the threshold is "not incremented". The pseudo-code returns
  that counter to zero after the CONF step. This design follows the
  pseudo-code: CONF stays at 11 and the counter restarts from zero, so a
  block in the right region never stops being counted.
* **A slip in the example.** The access sequence lists a write to a
  between the first two checkpoints. The counters shown require a write
  to b, and the trace above uses b.
* **Backup details.** Three points are this implementation's choice:
  STT-RAM ways that already received a block in this backup are not
  displaced again; equal CONF favours the SRAM block; and unsaved clean
  SRAM blocks are dropped.
* **Cost accounting.** The tag compare costs one cycle before the array
  latency, which the published latencies do not mention. Updating RIC /
  WIC / CONF of an STT-RAM block is not charged as an STT-RAM write.
* **Not covered by the source.** The write-back / write-allocate policy,
  the single outstanding request and the port protocols are not specified
  there. Neither is whether the prediction table survives a power failure;
  here it keeps its contents.
* **Not built.** The processor, its register backup, the 16 KB instruction
  cache, the supply monitor and the main memory are not built. The
  evaluation also compares with pure-SRAM, pure-STT-RAM, random-placement
  and other hybrid caches, and with checkpointing; those baselines are not
  part of this design.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of
cycles if it hangs.

| Testbench | What it checks |
|---|---|
| `tb_pred_table` | all ones after reset; 20,000 random writes/reads against a bit-array reference |
| `tb_cache_region` | random entry writes and set reads against a reference; SRAM loses, STT-RAM keeps, on power loss |
| `tb_access_policy` | every RIC x WIC x CONF x read/write x region x permission against the rule; the CONF state sequence |
| `tb_way_select` | 20,000 random cases against a reference, ties included |
| `tb_backup_select` | the two steps of the worked trace; 20,000 random sets against a reference |
| `tb_hl1_ctrl` | the whole worked trace above with its counter values, and the hit, migration and miss latencies |
| `tb_hybrid_l1_cache` | default-size cache with the memory model: 30,000 random requests over conflicting sets, with read-mostly and write-mostly blocks and 10 power failures; every read checked against a reference memory; each mechanism (both placements, both migrations, CONF steps, replacements, write-backs, backup to STT-RAM and to memory, hits after power returns) must occur |
| `tb_workloads` | the same traffic on the Table 7 style 16 KB / 32 KB 8-way splits (2:6, 4:4, 6:2), on thresholds 1 and 3, and under power failures every 2000, every 4000 and at random 2000 to 4000 requests; data checked, statistics printed |

`tb/pcm_model.sv` is a behavioural model of the phase-change main memory
(sparse storage, 35 / 100-cycle latency). It is testbench-only.

To run one, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/hc_pkg.sv tb/tb_hybrid_l1_cache.sv --top-module tb_hybrid_l1_cache -o sim
./obj_dir/sim
```

Replace the testbench name to run another. The default-size end-to-end
test runs in about a second.

What the tests do not establish: behaviour under a real instruction
stream, and the energy and performance gains reported for the original
scheme. Those need a processor model and the benchmark programs. The
event outputs are the hook for such measurements.
