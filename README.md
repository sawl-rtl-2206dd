# SAWL: a self-adaptive wear-leveling unit for NVM, in SystemVerilog

Non-volatile main memory (PCM, RRAM) wears out line by line. Wear leveling
moves data around so that no line takes more than its share of writes. The
table-based schemes in this family, such as PCM-S, split memory into regions.
Each region has a mapping entry. Every so many writes, the entry moves the
region elsewhere and shifts its lines with a key. Small regions level wear
well, but they need so many entries that only a small part of the table fits
in on-chip SRAM. A workload that jumps around memory then misses in the cached
table on almost every access.

SAWL keeps the full table in memory and caches part of it on chip. It also
changes the region size while running. When the on-chip hit rate falls, it
merges neighbouring regions, so one cached entry covers more memory. When the
hit rate is high and the hits crowd into one part of the cache, it splits
regions again for finer wear leveling. This RTL implements that unit: the
mapping tables, address translation, hit-rate monitor, merge and split
engine, and PCM-S exchange. It sits between the last-level cache and the NVM.

## Address information D and the XOR mapping

Memory has M = 2^28 lines of 256 bytes (a 64 GB device). A *logical region*
starts at P = 4 lines, so there are 2^26 logical region numbers (`lrn = lma / 4`).
A region of Q lines (Q = P·2^lvl) lives in an aligned block of Q physical
lines. A key in `[0, Q)` permutes the lines inside that block.

Each IMT (integrated mapping table) entry stores one log2(M)-bit word, D:

```
D = physical block address (upper bits, low log2(Q) bits zero) | key (low log2(Q) bits)
pma = D xor (lma mod Q)
```

Block address and key share one word, so the split between them moves with Q.
A bigger region uses fewer bits for its address and more for its key, without
changing the entry format. **Every entry of a merged region holds the same D.** So the
region size is not stored anywhere. It is found from the table: Q = n·P,
where n is the number of neighbouring entries with equal D. Regions are
always aligned powers of two, so the translator only has to compare entry
`lrn` with its buddy `lrn xor 2^k` for k = 0, 1, ... until they differ or
MAXL is reached.

Example (with P = 2 lines, as in the region testbench): logical regions 0
and 1 form one 4-line region with D = 7, which is the block of physical lines
4..7 with key 3. Logical line 1 goes to 7 xor 1 = 6, and logical line 3 goes
to 7 xor 3 = 4.

## Tables and where they live

| table | holds | stored in | block |
|---|---|---|---|
| IMT | one D per logical region (2^26 entries) | reserved NVM/DRAM space, K = 6 entries per translation line | `imt_access` |
| GTD | translation line → its physical place (11,184,811 lines) | on-chip SRAM | `gtd` |
| CMT | recently used entries: base lrn, level, D | on-chip, LRU stack of 131,072 entries (1 MB at 8 B) | `cmt` |
| owner table | physical region → logical region that owns it | reserved space next to the IMT | `imt_access` (space bit) |

Logical region `6k+m` is slot m of translation line k. `imt_access` turns an
entry index into (line, slot), asks the GTD where that line is, and reads the
line. A write is a read-modify-write of the 6-entry line.

The **owner table** is this design's own addition. A merge must empty a
physical block by moving out its current owner, and an exchange must update
both partners. Neither can be done without a reverse map, and a search of the
IMT is not practical. Owner-table lines use the same port as IMT lines, with
address bit `TA_W` set, and are not redirected by the GTD.

## Translating an address (`addr_translator`)

1. `lrn = lma >> PL`; look the region up in the CMT. On a hit the result is
   ready on the second cycle, and the entry moves to the top of the LRU stack.
2. On a miss, read IMT entry `lrn`. Then read its buddies `lrn xor 1`,
   `lrn xor 2`, ... while they hold the same D, up to MAXL probes. A miss costs
   1 + min(lvl+1, MAXL) entry reads.
3. Insert (base lrn, lvl, D) at the top of the CMT, evicting the LRU entry.
4. `pma = D xor (lma mod Q)`.

The CMT also reports whether a hit came from the more recent half of the stack
(`lk_first`). That is the input to the split rule.

## Deciding when to merge or split (`hit_monitor`)

- The monitor keeps the hit/miss outcome of the last SOW = 2^22 requests as a
  shift history, so the hit rate is exact over a sliding window.
- Every 100,000 requests it classifies the rate:
  - **low** is under 90 %;
  - **high** is over 95 %, with at least 99 % of the hits since the last
    sample in one half of the CMT stack.
- A condition that persists across samples for a settling window of SSW = 2^22
  requests gives one `merge_req` or `split_req` pulse, then the count starts over.

The top keeps that request pending until no host request is in flight. It then
applies it to the region of the most recently used CMT entry. The method does
not say which region is chosen; the top entry is this design's choice.

## Merge and split (`region_reconfig`)

**Split** is almost free. The two halves of a region with D become regions of
half the size. The lower half keeps D, and the upper half gets `D xor Q/2`.
With the XOR mapping, every line is then already where the new D says it is.
Only the IMT entries of the upper half and the owner table change. No data
moves.

**Merge** of region A (base lrn a, size Q, physical block pa) with its aligned
logical buddy B (same size, physical block pb):

1. The target is T, the aligned 2Q block that contains pa. H is the other half of T.
2. If pb is not H, the region C that owns H (found through the owner table)
   swaps places with B. B moves to H and C moves to B's old block, each keeping
   its key. C's IMT and owner entries are rewritten, and its CMT entry is
   invalidated.
3. A and B are moved into T under a new random key in [0, 2Q). Both regions'
   lines are read, then written to `D_new xor offset`.
4. All 2Q/P IMT entries of the merged region get D_new, both owner entries of T
   name A's base, and the CMT entries of A and B are invalidated.

A merge is refused when the buddy has a different size, or when the region is
already at MAXL. A split of a base-size region is refused too. Refusals are
counted, not retried.

The testbench `tb_region_reconfig` reproduces the worked example of the
method. Regions 0, 1 and 5 start at physical regions 3, 8 and 2. Regions 0
and 1 merge into physical regions 2–3, and region 5 is pushed to physical
region 8. Then the two-region block with key 3 at physical region 2 splits
into region 0 at physical region 3 and region 1 at physical region 2, both
with key 1.

## Data exchange (`data_exchange`, `line_mover`)

- Every SWAP_PERIOD = 128 host writes, the region just written swaps places
  with a randomly chosen region of the same size.
- Both regions get new random keys. This is PCM-S's inter- and intra-region
  shuffle in one step.
- If the random partner has a different size, that exchange is skipped and
  counted.
- The swap rewrites the IMT and owner entries of both regions and invalidates
  their CMT entries.
- `line_mover` does all data movement for both exchanges and merges. It reads
  all 2Q lines into a buffer and then writes each line to its new place, so a
  move of two Q-line regions costs 4Q line accesses.
- Random numbers come from a 32-bit Galois LFSR in each engine.

## The top (`sawl_top`)

- One host line request at a time: `h_req`/`h_we`/`h_lma`/`h_wdata`, taken
  while `h_ready` is high, then `h_done` with `h_rdata` and the physical line
  `h_pma`.
- The NVM data port (`nvm_*`) and the reserved-space port (`tl_*`) use a
  request/acknowledge protocol. A request is held until a one-cycle `ack`.
- Maintenance runs between host requests and owns both ports while it runs.
- After reset the GTD fills itself with the identity placement, one line per
  cycle. `h_ready` stays low until that finishes, which is 11.2 M cycles at
  full size.
- The GTD write port (`gtd_upd_*`) is a port of the top. The method also says
  translation lines are wear-levelled through the GTD, but it does not
  describe that mechanism, so no engine for it is built.
- `stat_*` count hits, misses, merge and split requests, merges, splits,
  refusals, exchanges and skipped exchanges, and show the window hit rate.

## Parameters

Defaults are the full-size configuration: 2^28 lines, 2048-bit lines, P = 4
lines, K = 6, a 131,072-entry CMT, windows of 2^22, sampling every 100,000
requests, thresholds 90/95/99 %, and a swapping period of 128.

These choices are not given by the method:

- the largest region, MAXL = 4 (64 lines);
- the stored entry width of 32 bits;
- the CMT entry size of 8 bytes, used to turn 1 MB into 131,072 entries.

All are package constants in `sawl_pkg` and module parameters.

## Where this departs from the method

- **Translation-line index.** One formula gives the translation line as
  `lrn/(P·K)`, but the text also says logical regions 6k..6k+5 share a line.
  The RTL follows the second (`lrn/K`), since lrn already has P divided out.
- **Owner table and the merge procedure.** The method shows the merge only by
  example, and the choice of target block, the swap with the evicted owner and
  the owner table are this design's own.
- **Which region is merged or split.** The method merges only regions that
  are in the cache, and says no more. Here each request merges or splits one
  region, the most recently used one. A run of requests therefore grows or
  shrinks the hot regions one step at a time.
- **Choice of the new physical place.** The method asks for a place that is
  not already held by a merged region. Here that becomes a rule: the merge is
  refused when the owner of the other half of the target block has a
  different size than the two regions being merged.
- **Skew counters** reset at every sample.
- **Translation-line wear leveling** (moving IMT lines and updating the GTD)
  is not built.
- **Crash consistency.** Metadata are written through to the reserved space
  at once. Nothing models the battery-backed flush of on-chip state.

## Files and simulation

`rtl/`:

- `sawl_pkg` holds the constants and the `space_e` type.
- The blocks are `gtd`, `imt_access`, `cmt`, `hit_monitor`,
  `addr_translator`, `line_mover`, `data_exchange`, `region_reconfig` and the
  top `sawl_top`.

`tb/`:

- There is one self-checking testbench per block (`tb_<block>`), plus the
  end-to-end `tb_sawl_top`.
- `tb_line_mem`, `tb_tl_mem` and `tb_entry_mem` are behavioural memory models
  with the same req/ack port.

Each testbench prints `TB_RESULT checks=N failures=M`. Run one with:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sawl_pkg.sv tb/tb_sawl_top.sv \
          --top-module tb_sawl_top && ./obj_dir/Vtb_sawl_top
```

`tb_sawl_top` runs the whole unit on a 1024-line memory: an 8-entry CMT,
regions of 4 to 32 lines, windows of 64 requests and an exchange every 8
writes. It runs three phases:

1. wide random traffic, which drives merges;
2. hot reads inside merged regions, which drive splits;
3. mixed traffic, then a read of every line.

Each access is checked for data and for its physical line, which the test
recomputes from the tables. The test fails if any of these never happens: a
hit, a miss, a merge or split request, a merge, a split, or an exchange.

`tb_sawl_attack` runs the two write attacks that wear leveling is judged
against, on the same small unit, and counts the writes each physical line
receives (migration writes included):

- a repeated-address attack, where one logical line is written 6000 times;
- a birthday-paradox attack, where a random line is written until its
  physical place changes, then the next random line is taken.

The test checks that the hottest physical line takes under 5 % of the attack,
that more than half of memory shares the wear, and that all data survive. In
one typical run, the hottest line took 48 of about 12,000 NVM writes, with an
exchange every 8 writes.

**Size limits of simulation.** The largest configuration simulated end to end
is the 1024-line one above. No full-size run is provided. After reset, the
full-size top takes 11.2 M cycles to fill the GTD. It also evaluates the
131,072-entry CMT lookup and LRU update on every cycle. Together these put one
full-size host operation far beyond a ten-minute simulation. The block
testbenches use small sizes too, and none of them depend on the default sizes.
