# Gemini: a partially direct-mapped DRAM cache controller

A die-stacked DRAM used as a last-level cache has two classic organisations.
A **set-associative** cache (tags stored in the DRAM next to the data) has a
good hit rate, but a lookup must read the tags before it knows which line to
read: tag, then data. A small SRAM *tag cache* hides this for most accesses,
but not for the first access to a set whose tags are not cached. A
**direct-mapped** cache can read tag and data in one go, so its hits are fast,
but it loses hit rate to conflicts.

Gemini mixes the two inside one 16-way set. It observes that the access that
misses the tag cache (a **leading block**) pays the tag-then-data penalty,
while later accesses to the same set (**following blocks**) find their tags in
SRAM and do not. Blocks also tend to keep their type from one visit to the
next. So:

* a **leading block** is stored at a fixed way of its set, given by a hash of
  its address (*static mapping*). On a tag cache miss, the controller reads
  that way and the set's tag batch **at the same time** (they are in different
  DRAM banks). If the tag says the line is the right one, the hit costs one
  DRAM access, like a direct-mapped cache.
* a **following block** can go in any way, chosen by the replacement policy
  (*dynamic mapping*), and is found through the tag batch already in SRAM.

This repository holds synthesizable SystemVerilog for the controller side of
that design: the SRAM tag cache, the static hash, the RV-CLOCK replacement
logic, the type-transition (mapping) policy with its two-bit filter, the
placement of tags and data in DRAM, and the controller that sequences a
request. The DRAM devices themselves, and the processor that issues requests,
are outside it; the testbenches model them.

## Terms

| term | meaning |
|---|---|
| set | 16 ways of 64-byte lines; two sets per 2KB DRAM row |
| section | 16 consecutive blocks (1KB) that map to one set; several sections share a set |
| tag batch | the 16 tags of a set, 64 bytes, moved as one unit between DRAM tag rows and the SRAM tag cache |
| leading block | access whose set's tag batch is not in the tag cache |
| following block | access whose set's tag batch is in the tag cache |
| static position | the way a leading block belongs to, `static_hash(block address)` |

## Access paths

Every request takes one of five paths. `rsp_event.path` reports which:

| path | tag cache | DRAM cache | what the controller does |
|---|---|---|---|
| A  | hit  | hit  | read the line at the way the cached tag names |
| B1 | miss | hit, at the static position | tag batch and line read concurrently; done |
| B2 | miss | hit, elsewhere in the set | tag batch first, then a second (serial) read of the line |
| C  | hit  | miss | RV-CLOCK picks a victim, main memory read, line installed |
| D  | miss | miss | victim is the static position (already read), main memory read, line installed |

Paths A and B1 take the same time: with a 9-cycle tag cache and DRAM latency
*L*, a read hit takes `9 + 3 + L` cycles from acceptance to the response cycle
(one cycle more when the tag batch pushed out of the tag cache must be written
back). B2 is the set-associative case that Gemini tries to make rare: it costs
a second DRAM read.

The controller (`gemini_cache`) serves one request at a time. Its states are:

```
IDLE ─► TCWAIT ─┬─ tag cache hit ──────────────► DECIDE
                └─ miss ─► LEADRD (tag batch ‖ line at static way) ─► DECIDE
DECIDE ─► [RD] ─► [WB] ─► [MMRD] ─► [DCWR] ─► [TAGWB] ─► DONE ─► IDLE
```

`DECIDE` looks the block up in the batch, runs the mapping policy (block found)
or the replacement policy (block not found), and sets a plan; the bracketed
steps run only if the plan needs them:

* `RD` – serial DRAM-cache read: path A, path B2, or a dirty RV-CLOCK victim;
* `WB` – write a dirty victim to main memory;
* `MMRD` – read the block from main memory (read miss);
* `DCWR` – write a new, migrated or written line into the DRAM cache;
* `TAGWB` – write the batch evicted from the tag cache back to its tag row;
* `DONE` – write the updated batch into the tag cache and answer.

## The tag

Each tag is 32 bits (4 bytes per 64-byte line, a 1:16 ratio):

| bits | field | use |
|---|---|---|
| 31:7 | `atag` | address tag: {address bits above the set index, offset in the section} (8 bits used at full size) |
| 6 | `a` | reference bit, for CLOCK |
| 5 | `h` | priority bit: 1 = leading / high priority |
| 4:3 | `c` | two-bit type-transition filter |
| 2 | `valid` | state |
| 1 | `dirty` | state |
| 0 | `ltype` | state: type of the block's previous access |

`ltype` exists because `h` does not always equal the type: the filter can keep
a following block at high priority (below).

## Where things live

`static_hash` XORs together the 4-bit chunks of `{upper address bits, offset in
section}`. The 16 blocks of a section land on 16 different ways, and the same
offset in different sections of one set lands on different ways.

`dram_layout` places data rows and tag rows. Data rows of consecutive sets are
spread over the 4 channels first, then the 16 banks. The tag batch of a set is
in the same channel, in the bank `data bank XOR 8`, in rows above that bank's
data rows; one 2KB tag row holds 32 batches, so there is one tag row per 16
data rows. At full size each bank has 8192 data rows (rows 0–8191) and 512 tag
rows (rows 8192–8703). Because a set's tag and data are never in the same bank,
the two reads of a leading access can proceed in parallel.

## Replacement: RV-CLOCK

Leading blocks miss expensively: a leading miss already spent a DRAM read on
the static way, and the line must then come from main memory. Following
misses only cost the difference between the DRAM cache and main memory. So
leading blocks (`h = 1`) are protected, but not for ever.

`rv_clock` runs CLOCK (hand, reference bits, second chance) over a range that
changes. The AND of the reference bits of all following lines is a mask
signal:

* some following line is unreferenced → leading lines are out of range; the
  victim is a following line;
* all following lines are referenced → the whole set is in range, and a cold
  leading line (reference bit 0) can be evicted.

An invalid way is used first. The whole hand sweep is evaluated in one cycle;
the reference bits it clears are returned in `a_clear` and written with the
new line. The hand is stored with the tag batch in the tag cache and restarts
at way 0 whenever a batch is brought in from DRAM.

A leading insertion (path D) does not use CLOCK: its victim is the static way.

## Type changes: mapping policy and filter

When a block is found in its set, `mapping_policy` compares its previous type
(`ltype`) with the current one:

| previous → now | action |
|---|---|
| leading → leading | nothing (it may sit off its static way; then it is a B2 access) |
| following → following | filter counter decremented |
| leading → following | priority bit reset, unless the filter reserves it |
| following → leading, at its static way | priority bit set |
| following → leading, elsewhere, static way holds a referenced leading line | only that line's reference bit is cleared; no move |
| following → leading, elsewhere, otherwise | **migrate**: the static way's occupant is written back if dirty and dropped, the block moves there, its old way is freed |

`type_filter` keeps blocks that flip type often from being demoted and
evicted just before they turn leading again. Its two-bit counter `c`:

* following → leading: `c = min(c + 2, 3)`;
* following → following: `c = max(c − 1, 0)`;
* leading → anything: unchanged.

The priority bit becomes 1 on any leading access and `c != 0` on a following
access. A block alternating leading/following therefore stays high priority;
a block that turned leading once keeps priority for two following accesses
and then drops to low priority.

## Modules

| file | what it is |
|---|---|
| `rtl/gemini_pkg.sv` | tag, batch, DRAM location and request types; path and event encodings |
| `rtl/gemini_cache.sv` | top: the controller sequencer, instantiates everything below |
| `rtl/tag_cache.sv` | SRAM tag cache: 32K batches, 8-way, 9-cycle pipelined lookup, returns the replacement candidate for write-back |
| `rtl/static_hash.sv` | static position of a leading block |
| `rtl/rv_clock.sv` | RV-CLOCK victim selection (combinational) |
| `rtl/mapping_policy.sv` | type-transition handling (combinational), uses `type_filter` |
| `rtl/type_filter.sv` | two-bit frequent-transition filter (combinational) |
| `rtl/dram_layout.sv` | set/way → channel, bank, row, column of data and tag batch |
| `tb/dram_model.sv` | behavioural DRAM (fixed latency, sparse storage), used for both the stacked DRAM and main memory |

### Top-level ports

* Request side: `req_valid`/`req_ready`, `req_we`, `req_blk` (block address,
  64-byte units), `req_wdata` (full line). `req_ready` is high only while idle.
  `rsp_valid` pulses for one cycle per request, with `rsp_rdata` for reads and
  `rsp_event` (path and mechanism flags).
* Three DRAM ports with the same bundle (`mem_req_t` = write flag, 32-bit
  address, 512-bit data): `dcd_*` to the DRAM cache data banks, `dct_*` to its
  tag banks, `mm_*` to main memory. A request is held until `*_req_ready`; a
  read returns exactly one `*_rsp_valid` later, in order; writes return
  nothing. Assertions in the top check that a pending request stays stable.
* Reset `rst_n` is asynchronous, active low; it clears the sequencer and all
  tag cache valid bits.

## Sizes

| parameter | default | origin |
|---|---|---|
| ways per set | 16 | as described |
| line / tag size | 64 B / 4 B | as described |
| DRAM cache data capacity | 1GB → `SET_W = 20` (1M sets) | evaluated configuration; tag rows come on top (own reading) |
| main memory | 16GB → `BLK_W = 28` | evaluated configuration |
| tag cache | 32K entries, 8-way, 9 cycles | evaluated configuration; an entry = one set's batch (own reading) |
| channels / banks / row | 4 / 16 / 2KB | evaluated configuration |
| section | 16 blocks (`OFF_W = 4`) | own choice |

Nothing is scaled down: the RTL defaults are the evaluated sizes. The tag
cache at full size is about 17 Mbit of storage (32K × 526 bits).

## Own choices and departures

These points are not fixed by the original description and were decided here:

* the hash function, the section size, the address split and the exact
  DRAM interleaving;
* a tag cache entry holds a whole tag batch; its replacement is first-invalid,
  then round-robin; evicted batches are always written back;
* the controller is blocking (one request in flight), so the queuing effects
  that the original evaluation reports are not present;
* on a leading miss, the main-memory read starts after the tag batch shows the
  miss, rather than being overlapped further;
* writes are full-line write-backs from the upper cache, write-allocate
  without a main-memory read; the DRAM-cache-presence (DCP) bit used to avoid
  write probes lives in the upper cache and is not modelled;
* the state field of the tag holds `valid`, `dirty` and `ltype`;
* in the "clear the static occupant's reference bit" case the block itself is
  still given high priority;
* DRAM timing (tCAS, tRCD, tRP, tRAS, row buffers) is not modelled; the DRAM
  model has a fixed latency.

## Simulating

All files are plain SystemVerilog-2017. The package must come first on the
command line. With verilator 5, the end-to-end test:

```
verilator --binary --timing --assert rtl/gemini_pkg.sv rtl/type_filter.sv \
  rtl/static_hash.sv rtl/rv_clock.sv rtl/mapping_policy.sv rtl/dram_layout.sv \
  rtl/tag_cache.sv rtl/gemini_cache.sv tb/dram_model.sv tb/tb_gemini_cache.sv \
  --top-module tb_gemini_cache
./obj_dir/Vtb_gemini_cache
```

`tb_gemini_full` and `tb_gemini_workload` run the same way with their own
file and top module in place of `tb_gemini_cache`.

A unit testbench needs only the package, its module (plus
`rtl/type_filter.sv` for `mapping_policy`) and the testbench; add `-Wno-WIDTH`
for the unit testbenches, whose reference models mix integer widths freely.
Every testbench prints one line `TB_RESULT checks=N failures=M` and stops by
itself; a watchdog ends it with a failure if it hangs. The full-size test
(`tb_gemini_full`, all defaults) compiles in about 20 s and runs in about a
second.

| testbench | what it checks |
|---|---|
| `tb_static_hash` | hash against a hand-written XOR, distinct ways within a section and across sections |
| `tb_type_filter` | every counter/type combination against the rule table; alternating and one-off type sequences |
| `tb_rv_clock` | 20 000 random sets against a step-by-step CLOCK hand model; masking and full-range cases |
| `tb_mapping_policy` | random tags against the transition table, including the write-back flag |
| `tb_dram_layout` | hand-computed locations, uniqueness of data and tag locations, tag bank ≠ data bank, tag rows above data rows |
| `tb_tag_cache` | a reference set-associative model: hit/miss, contents, victim, exact 9-cycle latency, back-to-back lookups |
| `tb_gemini_cache` | reduced size (256 sets, 16-entry 2-way tag cache): directed D/A/C/B1/B2/migration sequence with latency checks, then 4000 random requests; every read compared with a reference memory image; each path and mechanism (migration, reference clear, dirty write-back, full-range CLOCK, leading eviction, static conflict, tag write-back, reservation, both transitions) must occur |
| `tb_gemini_full` | the same at the full default size, with twelve sets fighting for one 8-way tag cache index |
| `tb_gemini_workload` | synthetic traffic shaped like the access pattern the design targets: sections visited again and again, each visit starting at the same leading block, tag batches pushed out of the tag cache between visits. With stable block types at least 90% of leading hits must take the concurrent path B1 (the run gives 502 B1, 0 B2); with types flipping the filter must reserve priority. All reads compared with a reference image |

## How far to trust it

The controller has been checked for data integrity (every read returns the
last value written) and for the policy rules above, under random traffic at
reduced and full size, against models written independently of the RTL. It
has not been run on real memory traces, so no hit-rate or IPC figure of the
original evaluation is reproduced here, and the DRAM timing that produces
those figures is not modelled. Full-size synthesis was not completed: the tag
cache is a large memory and is meant to map onto SRAM macros.
