# Way memoization with a Memory Address Buffer

A set-associative cache normally reads every tag array and every data way on
each access, then throws away all but one way. Most of that energy is wasted:
programs touch the same few lines again and again. A **Memory Address Buffer
(MAB)** remembers which way holds each recently used line. When an access hits
in the MAB, the cache is told to skip its tag arrays and to read one data way
only. The cache itself is not changed. It only needs a "tag disable" input and
one "way disable" input per way.

The catch is timing. The address of a load is `base + displacement`, and the
32-bit adder that forms it is usually on the critical path. Looking the
finished address up in a table afterwards would make the cycle longer. The MAB
avoids this. It is searched *in parallel with* the address adder, using a key
that needs only a 14-bit add. So the unit adds no delay and no cycles. A MAB
miss simply turns into an ordinary cache access.

This RTL implements the technique for a processor with two 32 kB, 2-way
set-associative caches (512 sets, 32-byte lines):

* `dcache_mab`: the data side, with a 2x8 MAB.
* `icache_mab`: the instruction side, with a 2x16 MAB.
* `wm_top`: both units side by side.

## Address split and the search key

A 32-bit byte address splits into three fields:

| bits   | field      | width |
|--------|------------|-------|
| 31..14 | tag        | 18    |
| 13..5  | set index  | 9     |
| 4..0   | offset     | 5     |

`mab_keygen` forms the key from the base address `B` and the displacement
`D` in three steps:

1. A 14-bit adder adds `B[13:0] + D[13:0]`.
2. Bits 13..5 of that sum are the exact set index of `B + D`.
3. The key's tag is `B[31:14]` as it stands, with no add. A 2-bit **cflag**
   records how the real tag differs from it.

The cflag comes from the carry out of the 14-bit adder and from the upper 18
bits of `D`:

| `D[31:14]` | carry 0          | carry 1         |
|------------|------------------|-----------------|
| all zeros  | `00` (tag)       | `01` (tag + 1)  |
| all ones   | `10` (tag - 1)   | `00` (tag)      |
| other      | `11` (invalid)   | `11` (invalid)  |

The key `{B[31:14], cflag, set index}` therefore names exactly one cache line
whenever `-2^14 <= D < 2^14`. Larger displacements get cflag `11`. Such a key
never hits, and the access becomes a normal cache access.

One line can appear under different keys. For example, `(T, 00)` and
`(T-1, 01)` both mean tag `T`. They are then separate MAB entries. This costs
hit rate, never correctness.

The path from the operands to a hit is the 14-bit adder followed by the
9-bit set-index comparators. The tag comparators work straight from the base
register and run in parallel.

## The MAB (`mab_table`)

### Storage

* `N_TAG` tag entries, each holding `{tag, cflag}` (20 bits) and a valid bit.
* `N_IDX` set-index entries, each holding 9 bits and a valid bit.
* For every pair (tag entry `i`, set-index entry `j`), a flag `vflag[i][j]`
  and a way number `way[i][j]`.

So a 2x8 MAB stores only 2 tags and 8 indices, yet describes 16 lines. The
scheme works because loops reuse a handful of base registers, so few distinct
tags are live at a time, spread over many sets.

### Lookup

Lookup is combinational and happens in the address-generation cycle. The key
is compared with all tag entries and all set-index entries. It is a **hit**
when all three of these hold:

* the key is valid (cflag is not `11`);
* both comparisons match;
* `vflag[i][j]` is set.

`hit_way` is then `way[i][j]`.

### Update

The update happens at the clock edge where the access leaves the lookup stage
(`req_valid && req_ready`). Replacement in both entry groups is
least-recently-used (`mab_lru`, one instance per group).

| tag | set index | action |
|-----|-----------|--------|
| hit `i` | hit `j` | refresh both LRU orders |
| miss | hit `j` | LRU tag entry `i` takes the new tag; `vflag[i][*] <= 0` |
| hit `i` | miss | LRU set entry `j` takes the new index; `vflag[*][j] <= 0` |
| miss | miss | both replaced; `vflag[i][*]` and `vflag[*][j] <= 0` |
| cflag `11` | (any) | `vflag[LRU tag entry][*] <= 0`; nothing allocated, LRU unchanged |

The pair's own flag is set later. When the cache reports that the access is
done (`resp.valid`), the unit does `vflag[i][j] <= 1` and
`way[i][j] <= resp.way`. On a MAB hit this rewrites the value the pair
already holds. On a miss, `resp.way` is the way where the cache found the
line or refilled it.

Only one access is outstanding. `req_ready` is high when the cache stage is
empty, or when its access finishes in this cycle. If two updates meet at one
edge, the new access's clears are applied after the old access's set, so the
clears win.

### Keeping the MAB consistent with the cache

A MAB hit is only safe if the line is really in the way the MAB names. The
clearing rules above keep the MAB in step with its own replacements. The
cflag-`11` rule covers accesses that bypass the MAB.

The original description argues that this is enough "as long as the number of
tag entries is smaller than the number of ways". Its preferred configurations
use 2 tag entries with a 2-way cache, though, and then it is not enough. The
cache replaces lines by LRU *within a set*, while the MAB's tag LRU is
*global*. Here is a trace that shows the problem:

1. Lines X and Z share set s. Z was used more recently in s.
2. X is then used in another set, so X is the globally more recent tag.
3. A third tag Q in set s now causes two things:
   * The cache evicts X, the LRU line of set s.
   * The MAB replaces Z's tag entry, the LRU tag entry. It clears Z's row.

X's pair in set s survives and now points at Q's data.

This design therefore adds **refill invalidation**, controlled by
`REFILL_INVALIDATE` (default 1). When the cache reports that it refilled way
`w` for an access whose set index has an entry `j`, every
`vflag[*][j]` whose way is `w` is cleared. This needs no new cache signal
beyond the refill flag. The tag-only cache model catches any wrong way.
`tb_mab_table` runs the trace above. With `REFILL_INVALIDATE = 0`, that
testbench reports exactly this error. `tb_mab_stress` shows the same thing
on random traffic.

### Same-cycle cases

A lookup can happen in the same cycle as the completion it depends on. Two
cases are resolved combinationally:

* **Bypass.** The lookup matches the pair that is completing. It hits, with
  the way just reported. Without this, back-to-back accesses to the same line
  would always miss the second time.
* **Kill.** The lookup matches a pair that the completing refill invalidates.
  It misses.

## Data side (`dcache_mab`)

The load/store unit presents `base` and `disp` together with `req_valid`.
Two things happen in that cycle:

* The ordinary 32-bit adder forms the address.
* `mab_keygen` and `mab_table` decide the disables.

At the edge where the request is accepted, the unit registers the following
in `ctl`:

* `addr`
* `tag_disable`, which is the MAB hit
* `way_disable[1:0]`: on a hit, all ways except `hit_way`; on a miss, none

`ctl.valid` stays high until the cache answers with `resp`, which carries:

* `valid`
* `way`: the way that holds the line
* `refill`: set when the line was just brought in

A cache hit answered in the same cycle lets the next access go at once. The
throughput is therefore one access per cycle, and the unit never adds a cycle.
Loads and stores are treated alike. If the cache has a write-back buffer that
lets stores write a single way, that remains the cache's business.

## Instruction side (`icache_mab`)

The unit owns the program counter, `ctl.addr`. Each request names the source
of the next fetch address:

| `flow` | next PC | MAB key |
|---|---|---|
| `FLOW_SEQ` | PC + 8 | keygen(PC, 8) |
| `FLOW_BRANCH` | PC + `disp` (32-bit adder) | keygen(PC, `disp`) |
| `FLOW_LINK` | `link_addr` | `{link_addr[31:14], 00, link_addr[13:5]}` |

A sequential fetch that crosses into the next line sees a carry out of the
14-bit adder, and its key is formed exactly like a load's. Fetches within one
line hit the MAB as well, since their pair is already valid. Timing and
handshake are the same as on the data side.

The unit always fetches the *next* PC, so the first fetch after reset should
be a jump. `RESET_PC` only matters for a first `FLOW_SEQ` or `FLOW_BRANCH`.

## Top level (`wm_top`)

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | logic | clock, asynchronous active-low reset |
| `d_req_valid` / `d_req_ready` | in / out | logic | load/store address handshake |
| `d_base`, `d_disp` | in | `addr_t` | base register and displacement |
| `d_ctl` | out | `cache_ctl_t` | to the data cache: valid, address, tag disable, way disables |
| `d_resp` | in | `cache_resp_t` | from the data cache: done, way, refill |
| `i_req_valid` / `i_req_ready` | in / out | logic | fetch handshake |
| `i_flow` | in | `flow_e` | sequential, branch, or link-register target |
| `i_disp`, `i_link_addr` | in | `addr_t` | branch offset and link register |
| `i_ctl`, `i_resp` | out / in | structs | instruction cache, as on the data side |

The types are defined in `rtl/mab_pkg.sv`.

Parameters:

* `D_N_TAG` = 2 and `D_N_IDX` = 8
* `I_N_TAG` = 2 and `I_N_IDX` = 16

Every MAB size from 1x4 to 2x32 can be built by changing these. Sizes that
are not powers of two also work, because the LRU is rank-based.

## Files

| file | contents |
|---|---|
| `rtl/mab_pkg.sv` | widths, cflag and flow enums, cache control/response structs |
| `rtl/mab_keygen.sv` | 14-bit key adder and cflag table |
| `rtl/mab_lru.sv` | N-entry true LRU (rank counters) |
| `rtl/mab_table.sv` | the MAB: entries, comparators, vflag/way arrays, update rules |
| `rtl/dcache_mab.sv` | data-side unit |
| `rtl/icache_mab.sv` | instruction-side unit with the PC |
| `rtl/wm_top.sv` | both units |
| `tb/cache_model.sv` | behavioural 2-way LRU cache, tags only; flags any wrong memoised way |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus `tb_mab_configs` |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` at the end and stops
itself through a watchdog. Any of them runs with plain Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
          rtl/mab_pkg.sv tb/tb_wm_top.sv --top-module tb_wm_top
./obj_dir/Vtb_wm_top
```

What each testbench checks:

* **`tb_mab_keygen`** compares the key with the full 32-bit sum, on more than
  3000 random and edge-case operands. It also visits each cell of the cflag
  table.
* **`tb_mab_lru`** compares the victim with a reference list, every cycle.
* **`tb_mab_table`** walks through each update rule with hand-computed
  expectations: both cases of the same-cycle logic, the eviction trace, and
  6000 random accesses.
* **`tb_dcache_mab`** and **`tb_icache_mab`** run loop-like streams against
  the cache model. They check every address and that memoised ways are never
  wrong. They also check that 64 back-to-back hits take 64 cycles.
* **`tb_wm_top`** runs both sides at once at the default sizes. It counts how
  often each mechanism happened and fails if any never did. The mechanisms
  are: the allocation cases, out-of-range displacements, bypass, refill
  invalidation, hits through cflag `01` and `10`, sequential, branch and link
  hits, and stalls.
* **`tb_mab_stress`** runs 20,000 random accesses built so that lines of
  the same set keep evicting each other. It uses three units, with the
  caches answering hits one cycle late:
  * 2x8 with refill invalidation: no wrong way.
  * 1x8 with the original rules only: no wrong way. This is the case the
    original argument covers.
  * 2x8 with the original rules only: 9 wrong ways in this trace. The
    testbench reports these but does not count them as failures.
* **`tb_mab_configs`** runs all eight MAB sizes on address traces shaped like
  an 8x8 DCT and a 512-point FFT. It prints tag and way reads per access.
  * 2x8 MAB: about 0.18 tag reads per DCT access and 0.21 per FFT access.
  * 1-tag MABs on the DCT: no tag reads saved, because the sample array and
    the coefficient table evict each other's tag.

All testbenches finish in well under a second.

## How far this follows the original description

Taken from it:

* the address split;
* the 14-bit key adder and the cflag table;
* the two entry types;
* the vflag array and its four update cases;
* the out-of-range rule;
* LRU replacement;
* the 2x8 and 2x16 sizes;
* the disable registers between address generation and the cache;
* the three instruction-side key sources, including the stride of 8.

Choices made here:

* the request/response handshake and the one-access-in-flight pipeline;
* allocating entries at lookup and writing the way at completion;
* refill invalidation (see above);
* the bypass and kill logic;
* cflag `00` for link-register targets;
* a cflag-`11` access does not update the LRU;
* reset values;
* the LRU implementation.

Not built:

* The caches themselves, their write-back buffer and the processor. These are
  only represented by ports and, in simulation, by the tag-only model.
* The clock gating used for power. Registers here simply load only when an
  access advances; a gating cell can be inferred from those enables.
* The separate same-line check for sequential fetches, found in earlier
  instruction-cache schemes. Such fetches hit the MAB instead.

The power, area and delay numbers of the original evaluation come from a
0.13 um standard-cell flow and circuit simulation. This RTL does not
reproduce them. The counts of tag and way reads in the testbenches are the
quantities those numbers scale with.
