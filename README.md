# CRUNCH: consistent-hashing bank remapping for a resizable DRAM cache

A die-stacked DRAM cache of a few hundred megabytes is often larger than the
running programs need. Turning some of its banks off would save refresh and
background power. The practical DRAM-cache organisation makes that hard,
because it keeps a whole set (tags and data, here 29 ways) in one 2 KB row of
one bank. Switching a bank off therefore takes whole sets away, and the
addresses of those sets have to be sent to other banks. There are two naive
ways to do this, and each fails in its own way:

* **Fail over to the next bank.** Only the lost bank's blocks move, but one
  neighbour then carries twice the load.
* **Re-index everything modulo the number of banks left on.** The load is
  even, but nearly every dirty block in the cache moves on every resize.

CRUNCH (Cache Resizing Using Native Consistent Hashing) gets both properties
the way consistent hashing does for web servers. Each bank owns many small
*regions* of the address space, spread in a pseudo-random order. When a bank
goes away, each of its regions fails over to the next bank in that region's
own order. The lost bank's blocks are therefore spread over all remaining
banks, and no other block moves.

This directory holds synthesizable SystemVerilog for the CRUNCH remapping
substrate of one DRAM-cache controller:

* the region remapping table;
* the bank selection logic;
* the hierarchical dirty-row counters used to find dirty data fast;
* the engine that migrates dirty blocks when banks are switched off or back
  on.

Self-checking testbenches come with it. The geometry is the one the design
was evaluated with: 128 MB, 4 channels, 8 banks per channel, 2048 rows per
bank, 29 ways per row.

## 1. Regions, super-regions and the remapping table

The 256 regions are grouped into 32 *super-regions* of 8 regions each. Each
super-region contains exactly one region of every bank. The order of the
banks inside a super-region is a permutation that differs from one
super-region to the next. These 32 permutations form the **region remapping
table (RRT)**: 32 rows of 8 three-bit bank ids, 96 bytes, read-only
(`crunch_rrt`).

A region index is `{super-region (5 bits), position (3 bits)}`. The bank is
chosen as follows (`crunch_bank_select`):

* **All banks on:** the bank is `RRT[super-region][position]`.
* **Some banks off:** walk the row from `position` onwards and take the first
  bank that is on. The walk wraps around *inside the same super-region*, not
  into the next one.

So the fail-over order of a region is simply the rest of its row, read
cyclically. Bank *b*'s 32 regions sit in 32 different rows. Each of them
therefore falls to whichever bank follows *b* in its own row, and the table
is built so that these followers are spread evenly.

**Table content.** Row `s`, position `j` holds

    RRT[s][j] = BASE[(s / 8) mod 4][j]  XOR  (s mod 8)

The four base orders are these (see `crunch_pkg`):

    0 5 7 6 2 4 3 1
    0 6 2 1 4 7 5 3
    0 4 3 1 7 6 2 5
    0 7 4 6 3 5 2 1

XOR-ing a cyclic order with a constant keeps it a permutation. It also keeps
the XOR-differences between neighbours, so over the eight translates of one
base, every bank meets the same multiset of "next bank" offsets. The four
bases were picked so that, over all 32 rows:

* each bank's fail-over bank, when it alone is off, is each of the other
  seven banks 4 or 5 times;
* no two rows are rotations of one another.

The balance is only guaranteed for a single bank failure, which is the
property the table was asked to meet. For several banks off it is
empirically good. For the balanced shut-down patterns below, the
regions-per-active-bank spread is:

| banks on (bank 0 leftmost) | max | min |
|----------------------------|-----|-----|
| 11111111 | 32  | 32  |
| 11110111 | 37  | 36  |
| 11010111 | 44  | 42  |
| 11010101 | 55  | 48  |
| 10010101 | 66  | 63  |
| 10010001 | 88  | 83  |
| 10000001 | 128 | 128 |
| 10000000 | 256 | 256 |

The same holds when banks are simply switched off in index order (bank 0
first, then bank 1, ...), so a power manager only has to decide *how many*
banks to keep on, not which ones:

| banks on | 7 | 6 | 5 | 4 | 3 | 2 | 1 |
|---|---|---|---|---|---|---|---|
| regions per bank (max/min) | 37/36 | 43/42 | 53/50 | 64/64 | 88/82 | 128/128 | 256/256 |

Because selection is a function of (region, active vector) only, a region
whose bank stays on never moves. Only the regions of banks that turn off
change bank.

## 2. Address layout and widened tags

With 64 B blocks, the line address (physical address bits 47:6, 42 bits) is
split as follows:

| line-address bits | use |
|---|---|
| [1:0] | channel |
| [9:2] | region index (super-region = [9:5], position = [4:2]) |
| [20:10] | row (= set) inside the bank |
| [41:21] | upper tag bits |

A block keeps its row number when it changes bank. Several regions can
therefore share a bank's row, so the tag stored in the row is widened to
`{upper tag bits, region index}` (29 bits). The widened tag is also what
lets the migration engine recompute where a block found in a row belongs, and
rebuild its full address for a write-back (`tag_to_line`).

Taking the region from the low address bits spreads consecutive lines over
banks. The exact bit positions are a choice of this implementation.

## 3. Transitions: migrating dirty data

Dirty blocks in a bank that turns off must not be lost. They are *migrated*
to their new bank over the cache's own bandwidth rather than written back
off-chip. Clean blocks are dropped. When a bank turns back on, its displaced
dirty blocks are *repatriated*. Under consistent hashing they may sit in any
other bank, so every bank that stayed on has to be searched.

`crunch_transition_ctrl` (one per channel) does this:

1. **Request.** A request carries the new bank vector. Banks that turn on are
   powered immediately.
2. **Choose source banks.** The sources are the banks that turn off. If any
   bank turns on, every bank that stays on is a source too.
3. **Walk each source bank.** The engine asks the bank's HIER tree (section 4)
   for the next row holding a dirty block, then reads the row's tag state
   (one command).
4. **Scan the row, one way per cycle.** For every valid dirty way, the
   engine recomputes the bank under the new vector (RRT plus selection,
   reusing the same logic as the demand path). If the bank changed, it
   migrates the block:
   * read the block;
   * read the destination row's tags;
   * write the block dirty into the destination row, in the first of:
     - a way with the same tag;
     - an invalid way;
     - a clean way;
     - a round-robin victim, which is first read and written back to memory;
   * invalidate the source way.

   That is 4 DRAM commands per migrated block, plus 1 and a write-back for a
   dirty victim.
5. **Update HIER.** The destination row is marked dirty. When the scan ends,
   the source row is marked clean if no dirty block stayed in it.
6. **Finish.** When all sources are done, banks that turn off lose power, and
   the new vector becomes the one used for demand mapping.

While any channel is in a transition, `stall_o` is high and demand accesses
must wait, so the cache does not serve requests mid-transition.

The total command count of a transition is exact and is checked by a
testbench: one row read per dirty row visited, four per migrated block, and
one per victim written back.

## 4. Finding dirty rows: hierarchical dirty bits (HIER)

A plain walk of a bank costs 2048 row reads even when only a handful of rows
are dirty. `hier_dirty_tree` keeps, per bank, a perfectly balanced 16-ary
tree of counters:

| level | entries | width | counts |
|---|---|---|---|
| leaves | 2048 | 1 bit | row has a dirty block |
| middle | 128 | 5 bits | dirty rows among 16 rows |
| upper | 8 | 9 bits | dirty rows among 256 rows |
| root | 1 | 12 bits | dirty rows in the bank |

That is 2772 bits per bank, 8 trees per channel.

**Update.** The demand-side controller and the migration engine report "row
*r* is now dirty / now clean". A report that changes the leaf increments or
decrements the counters on the path to the root in the same cycle. Repeated
reports are ignored.

**Search.** The search returns the first dirty row at or after a cursor. It
reads one tree node (all of its children) per cycle: the upper level, then
the middle level, then a 16-bit leaf word. Subtrees whose counter is zero are
skipped. If the subtree containing the cursor has nothing at or after it, the
cursor moves to the next subtree and the walk restarts at the top. A search
answers 4 cycles after it is requested when the first candidate holds the
answer, and never later than 9. In the end-to-end test a power-down visits
16 rows instead of the 8192 of a full walk.

## 5. Module map and interfaces

| file | content |
|---|---|
| `rtl/crunch_pkg.sv` | geometry constants, address/tag helpers, RRT base orders, command structs |
| `rtl/crunch_rrt.sv` | region remapping table (ROM) |
| `rtl/crunch_bank_select.sv` | first active bank in permutation order |
| `rtl/crunch_mapper.sv` | line address to channel/bank/row/tag |
| `rtl/hier_dirty_tree.sv` | HIER counters of one bank, update and search |
| `rtl/crunch_transition_ctrl.sv` | transition engine of one channel |
| `rtl/crunch_channel.sv` | engine + 8 HIER trees of one channel |
| `rtl/crunch_top.sv` | 4 channels + demand mapping |

### `crunch_top` ports

**Demand mapping.**
* `line_i` is mapped combinationally to `map_ch_o`, `map_bank_o`,
  `map_row_o` and `map_tag_o`.
* `map_none_o` means no bank is on.
* `stall_o` means a transition is running; issue nothing.

**Dirty-row updates (`hu_*`).** One port per channel. The demand-side
controller reports every change of a row's dirty state on it.

**Resize.**
* `start_i` (one cycle) with `new_mask_i` (bit *i* = bank *i*) starts a
  transition. It is ignored if the vector equals the current one.
* `active_o` is the vector in use.
* `pwr_en_o[c]` are the bank power enables of channel *c*.
* All channels change together.

**DRAM-cache port (`dc_*`, per channel).**
* A `dc_cmd_t` is offered with `dc_valid_o` and taken with `dc_ready_i`.
* Each command gets one `dc_rvalid_i` pulse:
  - `DC_RD_META` returns the 29 `{valid, dirty, tag}` entries of a row on
    `dc_rmeta_i`;
  - `DC_RD_BLK` returns 512 data bits on `dc_rdata_i`;
  - `DC_WR_BLK` and `DC_INV` are just acknowledged.
* Only one command is in flight per channel.
* An assertion checks that an offered command is held until it is taken.

**Write-back (`wb_*`, per channel).** Valid/ready, carrying the line address
and data of a victim.

**Statistics.** HIER root counters per bank, and per-channel counts of
migrated blocks, victim write-backs and rows visited.

## 6. Simulating

Each testbench is self-checking. It ends with
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/crunch_pkg.sv tb/tb_crunch_top.sv --top-module tb_crunch_top
    ./obj_dir/Vtb_crunch_top

Replace `tb_crunch_top` with any other testbench:

| testbench | checks |
|---|---|
| `tb_crunch_rrt` | rows are permutations; no rotation-equivalent rows; 4-5 fail-over spread; 96 bytes |
| `tb_crunch_bank_select` | 3000 random permutations/positions/vectors against a reference walk |
| `tb_crunch_mapper` | bit fields; 32 regions per bank; only the lost banks' regions move along all shut-down patterns; 36-37 regions per bank with one bank off |
| `tb_hier_dirty_tree` | 2772 bits; root count and search results against a reference after random updates; 4-cycle single-path search, bounded search time; full drain |
| `tb_crunch_transition_ctrl` | power-down of bank 4 and power-up back, with a behavioural HIER: data and placement of every block, dropped clean blocks, forced dirty-victim write-back, exact DRAM command count |
| `tb_crunch_channel` | same with the real HIER trees and three banks at once |
| `tb_crunch_top` | full default size, demand traffic through the mapping port, all seven balanced shut-down patterns, then back to 8 banks |
| `tb_crunch_top_seq` | same at full size with the sequential order 01111111 ... 00000001, plus the region spread over the banks on after each step |

The end-to-end test checks every read against the last value written. It
also counts that each mechanism happened at least once: migration,
repatriation, victim write-back during migration, a demand access stalled by
a transition, a pruned HIER walk, and hits on migrated lines. It runs at the
default parameters in well under a second.

`tb/dram_cache_model.sv` is a behavioural model of the DRAM arrays (not
synthesizable). It uses associative storage, answers commands after 2
cycles, ignores its command port during reset, loses a bank's contents when
its power enable falls, and flags commands sent to a powered-off bank.

## 7. What is this implementation's own, and known limits

**Design choices.** The following follow the published description only in
intent; the details are choices of this RTL:

* the RRT formula and base orders;
* the address bit layout;
* the install/victim policy in the destination row;
* the command protocol and migration sequence;
* power sequencing: banks on first, off last;
* reset with all banks on;
* same-cycle HIER propagation;
* HIER kept in flip-flops rather than a small SRAM.

**Not included.** The demand-side cache controller (tag check, fills,
replacement), the DRAM arrays, the off-chip memory and the policy that
decides how many banks to keep on are not part of this design. They connect
through the ports above.

**Stale clean copies after a power-up.** On power-up, only *dirty* displaced
blocks are repatriated. A clean copy of a line left behind in its fail-over
bank stays valid there, and nothing looks it up while the home bank is on.
Suppose the line is then modified in its home bank, evicted to memory, and
the home bank is switched off again. The line maps once more to the old
fail-over bank, and the stale clean copy would be hit. (If the line is still
dirty at that point, migration overwrites the copy by tag, which is safe.) A
complete fix means invalidating displaced clean blocks on power-up. That
requires walking clean rows too, which gives up the HIER pruning. The
end-to-end test does not exercise this sequence.

**Throughput.** Only one DRAM command per channel is in flight. The engine
is meant to be correct and simple, not to reach the bank-level parallelism a
real controller would use during migration.

**RRT size.** The RRT has a parameter for the number of super-regions, but
the address layout and the table formula are fixed at 32 super-regions and
8 banks.
