# MemCache: a die-stacked DRAM that is part memory, part cache

A die-stacked DRAM gives a processor several times the bandwidth of its
off-chip DRAM, but it is too small to hold a big-data working set. There are
two usual ways to use it, and each has a flaw:

- **As a hardware cache.** Every access pays for tag and metadata traffic, and
  pages keep moving in and out.
- **As part of main memory.** Only a few GB of the footprint can live there,
  and pages that are only briefly hot gain nothing.

Real applications have a small set of pages that stay hot for the whole run.
MemCache uses that fact:

- **Memory portion.** One part of the stacked DRAM is ordinary main
  memory. Software places the persistently hot pages there, found by an
  offline profile. Accesses to those pages go straight to their frame, with no
  tags, no metadata and no page moves.
- **Cache portion.** The rest of the stacked DRAM is a hardware-managed page
  cache in front of off-chip memory. It catches the pages that are hot for a
  while, or hot in a way the profile missed.

The split between the two portions is one number: the index of the last
memory frame. The memory controller compares each physical address with it.

The split can be fixed at boot. It can also be chosen per application, and
announced by the operating system. In that case the cache portion resizes
itself to the frames left above the new boundary.

This RTL is the memory-side front end of that system in its evaluated
configuration:

- a 4 GB stacked DRAM in 4 channels, 4 KB interleaved;
- 3 GB of memory portion and 1 GB of cache portion;
- a cache portion organised as a Banshee-style page cache: 4-way,
  frequency-based lazy replacement with 10% sampling, and page remaps logged
  in a 1K-entry, 8-way Tag Buffer that software flushes above 70% occupancy.

## Address map

Frames are 4 KB. The stacked DRAM has `N = STACKED_FRAMES` frames: 2^20 for
4 GB by default. Smaller stacks (`N` down to any multiple of 4) are a
parameter change. The stacked address window is always the 4 GB below
off-chip memory, and any part of it beyond `N` is unmapped.

| Physical address / frame | What it is | Who uses it |
|---|---|---|
| frames `0 .. mem_frames-1` (default 786432, i.e. 0 to 3 GB) | memory portion | software-placed hot pages, served directly |
| frames `mem_frames .. base-1` | unused, when the frames above the boundary are not a power-of-two number of sets | requests here are refused (`bad_valid`) |
| frames `base .. N-1` (default 3 GB to 4 GB) | cache portion, `S` sets × 4 ways (default 65536 sets) | hardware only; requests naming these addresses are refused (`bad_valid`) |
| frames `N .. 2^20-1` (smaller stacks only) | unmapped | refused (`bad_valid`) |
| addresses ≥ 4 GB (up to 2^40) | off-chip memory | served through the cache portion |

- **Cache geometry.** `S` is the largest power of two with `4*S` no more than
  `N - mem_frames`. It is also capped at `CACHE_FRAMES/4`.
- **Cache frame placement.** The cache starts at `base = N - 4*S`. Way
  `w` of set `s` lives in frame `base + 4*s + w`. The set index is the low
  `log2(S)` bits of the page number. The stored tag is the whole page number,
  so the tag format does not change when `S` does.
- **Split sizes.**
  - A 3/1 or 2/2 GB split uses every frame.
  - A 1/3 split gets a 2 GB cache, and 1 GB stays unused.
  - A 0/4 split gets a 4 GB cache.
  - A 4/0 split has no cache. Off-chip requests then bypass it.
- **Channel selection.** A frame goes to channel `frame % 4`. Consecutive
  pages of the memory portion therefore spread over all channels, and so do
  the four ways of one cache set.
- **Partition register.** The boundary (`mem_frames`) is a register. It
  resets to 3 GB and is rewritten with `cfg_we`/`cfg_mem_frames`, anywhere
  from 0 to `N` frames. This is the hook for two things:
  - a boot-time setting (the static variant);
  - an OS instruction that announces a per-application split (the dynamic
    variant).

  The sequence for a repartition is under "Repartitioning" below.

## Request flow

Every last-level SRAM cache miss or write-back enters on `req` (a 40-bit
physical address, a read/write bit and an 8-bit id). The request is not
buffered. The partition router steers it by address, within the same cycle:

1. **Memory portion.**
   - The request becomes a die-stacked `K_DATA` command for frame `addr >> 12`
     and block `addr[11:6]`.
   - It enters the channel arbiter as source 0. It is accepted in the cycle
     its channel takes it.
2. **Off-chip page.**
   - The request goes to the cache-portion controller, which serves one
     request at a time.
   - It can only be accepted once the post-reset metadata sweep is done
     (`init_done`). The sweep clears `CACHE_FRAMES/4` sets: 262144 cycles at
     the default size.
3. **Address between the boundary and 4 GB.** The request is dropped and
   `bad_valid` pulses. These are cache frames, or unused frames. Nothing
   should name these addresses, because the hardware owns them.

Data does not pass through this block. The channel controllers, which are
outside it, return read data to the requester by id.

## The cache portion

This is the hardest part of the design. It lives in `banshee_cache_ctrl`.

### What each set holds

For every way, the set keeps a valid bit, a dirty bit, a tag and a 5-bit
access counter. It also has 4 *candidate* slots: a tag and counter for pages
that are not cached but have been seen recently.

In a real Banshee system, residency (cached or not, and in which way) travels
with the page-table entry and the TLB. A core therefore knows whether to go
to the stacked DRAM without reading any tag. The counters and candidates live
in the stacked DRAM itself.

This RTL keeps one on-chip copy of the per-set state. It uses the copy in two
ways:

- **Residency lookup.** The copy stands in for the TLB-carried residency bits.
  The lookup itself causes no DRAM traffic.
- **Metadata traffic.** Wherever the real design would touch the in-DRAM
  metadata, the RTL emits a `K_META` read or write to the set's first frame.
  The stacked-DRAM traffic therefore has the right mix of data, metadata and
  replacement commands.

### Per request

| Cycle | Step |
|---|---|
| accept | The request is latched. |
| +1 | The set's state is read. A `K_DATA` command goes to frame `base + 4*set + way` on a hit, or an off-chip `K_DATA` command on a miss. A write hit sets the dirty bit. |
| +2 | The request is done unless it was *sampled*. |

- **Sampling.** A 16-bit LFSR samples 10% of requests. Only sampled requests
  touch replacement state. A sampled request also issues a `K_META` read,
  then the decision, then a `K_META` write. It takes 5 cycles from accept to
  the next accept when every port is ready.
- **Counter updates.**
  - A sampled hit increments its way's counter.
  - A sampled miss increments the page's candidate counter. If the page has no
    candidate slot yet, it takes a free slot, or else the slot with the lowest
    count (ties go to the lowest index), and starts at 1.
  - When any counter of a set reaches its maximum, every counter of that set
    is halved. Counts therefore follow recent behaviour.
- **Replacement is lazy.** A sampled miss replaces a way only in two cases:
  - a way of the set is empty;
  - the page's candidate count is **strictly greater** than the smallest way
    counter.

  Equal counts do not move a page. This rule is what keeps page traffic low.
  The victim is the lowest-numbered empty way, or else the way with the
  smallest count. The victim's tag and count move into the candidate slot
  just freed. It can win its way back later.

### Replacement sequence

1. **Tag Buffer records.** Two records are written: one for the victim
   (uncached) and one for the new page (cached, way `w`). While the Tag
   Buffer refuses them, the controller stalls and pulses `evt.tb_stall`.
2. **Write-back.** If the victim is dirty, its page is read from the stacked
   frame and written off-chip (`K_REPL` commands, one per page).
3. **Fill.** The new page is read off-chip and written into the frame
   (`K_REPL`).

The whole sequence adds 4 to 6 cycles at full readiness.

### Repartitioning

When the boundary input differs from the one the cache was set up for, the
controller does the following:

1. It stops accepting requests. `init_done` drops.
2. It finishes the request in progress.
3. It sweeps every active set. For each dirty way it reads the page from its
   stacked frame and writes it off-chip (`K_REPL`). It then clears the set's
   metadata.
4. It takes on the new geometry. `init_done` rises again.

The sweep takes 2 cycles per set plus 2 per dirty page when all ports are
ready.

The software side of a repartition, in order:

1. Stop issuing requests.
2. Drain the Tag Buffer.
3. Write the boundary.
4. Wait for `init_done`.
5. Mark every page uncached in the page table and shoot down the TLBs. The
   hardware writes no Tag Buffer records for the pages the sweep drops.
6. Move whatever data lived in memory-portion frames that changed role.

Only after that may it use the new memory frames.

## Tag Buffer

The Tag Buffer is an SRAM log of recent remaps that the page table does not
know about yet. Each entry holds a page number, a cached bit and a way.

| Property | Behaviour |
|---|---|
| Organisation | 1024 entries, 8-way, indexed by the low 7 bits of the page number |
| Coalescing | A page already present is overwritten in place. A page that moves in and out repeatedly takes one entry. |
| Interrupt | `flush_irq` rises one cycle after occupancy passes 70% (717 of 1024). It also rises when an insert finds its set full; that insert is held, never dropped. |
| Draining | Software raises `drain_en`. This blocks new inserts. Software then takes one record per `drain_valid`/`drain_ready` handshake until the buffer is empty, which clears the interrupt. |
| Software flush | Writing the records into the page table and shooting down the TLBs is software and is not modelled. |

## Channel arbiter

Stacked-DRAM commands come from two sources: the memory-portion path and the
cache controller.

- Each command goes to channel `frame % 4`.
- When both sources want the same channel in the same cycle, a round-robin
  pointer per channel picks the winner. The pointer moves past the winner
  after each accepted command.
- The arbiter has no buffering. A source keeps its command until its channel
  takes it.

## Modules

| Module | Role | Main parameters (defaults) |
|---|---|---|
| `memcache_pkg` | shared widths, command and record structs | PA 40 bits, 4 KB pages, 2^20 stacked frames, 4 channels |
| `partition_router` | boundary register and address steering | `MEM_FRAMES_DEFAULT=786432`, `MAX_MEM_FRAMES=786432` (the top sets it to 1048576) |
| `banshee_cache_ctrl` | cache-portion controller, resizable | `STACKED_FRAMES=1048576`, `CACHE_FRAMES=1048576` (largest cache), `WAYS=4`, `NCAND=4`, `CNT_W=5`, `SAMPLE_PCT=10` |
| `tag_buffer` | remap log with flush interrupt | `ENTRIES=1024`, `WAYS=8`, `THRESH_PCT=70` |
| `stacked_chan_arb` | per-channel round-robin | `NUM_SRC=2`, `NUM_CH=4` |
| `memcache_top` | wiring of the above | `STACKED_FRAMES=1048576` (4 GB), `MEM_FRAMES=786432` (reset boundary), `CACHE_FRAMES=1048576`, `WAYS`, `NCAND`, `CNT_W`, `SAMPLE_PCT`, `TB_ENTRIES`, `TB_WAYS`, `TB_THRESH_PCT` |

The top's ports are as follows:

- **`req*`**: requests from the SRAM cache hierarchy.
- **`stk_valid/stk_ready/stk_cmd[4]`**: one command port per stacked channel.
- **`off_*`**: one off-chip command port.
- **`cfg_*` and `mem_frames`**: the partition register. `init_done` is low
  while the cache portion clears or resizes.
- **`flush_irq`, `drain_*`, `tb_occupancy`**: the Tag Buffer's software side.
- **`evt`**: strobes for hit, miss, sampled, replace, write-back and Tag
  Buffer stall. They are for performance counters.

All handshakes are valid/ready. A transfer happens on a rising clock edge
where both are high. Reset (`rst_n`) is asynchronous and active low.

## Choices not fixed by the evaluated system

The numbers taken from the evaluated system are:

- the 4 GB stacked DRAM, 4 channels and 4 KB interleaving;
- the 3 GB / 1 GB split;
- the 4-way page cache with 10% sampling and lazy, frequency-based replacement;
- the 1K-entry, 8-way Tag Buffer with its 70% flush threshold;
- the comparison of the address with the last memory frame.

The following are this design's own:

- the placement of memory frames below cache frames and of off-chip memory
  above 4 GB;
- the 40-bit physical address and the 8-bit request id;
- the candidate count (4), the counter width (5 bits), the halving rule and
  the tie-breaks;
- the metadata's address (each set's first frame);
- the power-of-two sizing of a resized cache, and the hardware write-back
  sweep on a repartition;
- whole-page write-back and fill;
- one outstanding request in the cache controller;
- the Tag Buffer record format: 31 bits plus valid, where the evaluated
  buffer's 5.5 KB works out to about 44 bits per entry;
- holding inserts to a full Tag Buffer set;
- the refusal of addresses in the cache frames.

## Limitations

- **Cache size after a repartition.** It is rounded down to a power-of-two
  number of sets. Splits such as 1 GB memory / 3 GB cache, or most
  per-application fractions, leave some stacked frames unused.
- **Metadata array size.** The on-chip array is sized for the largest cache
  (262144 sets). A build that never needs more than 1 GB of cache can set
  `CACHE_FRAMES=262144`.
- **Stacks larger than 4 GB.** These need `STACK_FRAME_W` changed in the
  package, and the off-chip base moved with it.
- **Not modelled.**
  - DRAM timing, the 16 B links and 32 B minimum transfers. They belong to the
    channel controllers.
  - Data payloads.
  - The page table, the TLBs and the flush handler.
  - The hot-page profiler and the OS allocator.
- **Throughput.** The cache controller handles one request at a time. This is
  a functional model of the policy and its traffic, not a performance-tuned
  pipeline.

## Simulating

Each testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and ends, and has a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module memcache_top_full_tb \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/memcache_pkg.sv tb/memcache_top_full_tb.sv
./obj_dir/Vmemcache_top_full_tb
```

Replace the top module with another testbench name to run the others.

| Testbench | What it covers |
|---|---|
| `partition_router_tb` | routing at, below and above the boundary; reprogramming and clamping the boundary; back-pressure |
| `stacked_chan_arb_tb` | a reference model of the round-robin choice per cycle; exactly-once, in-order delivery on `frame % 4`; strict alternation under contention |
| `tag_buffer_tb` | full size. Coalescing; the interrupt staying low at 716 and rising at 717 one cycle later; a held insert on a full set; exact drain contents |
| `banshee_cache_ctrl_tb` | an 8-set cache with 100% sampling against a cycle-independent reference model of the replacement policy, with random back-pressure; the 5-cycle sampled-request timing; shrinking to 4 sets and then to no cache, with the expected write-back sweep; a 10%-sampling instance whose sample rate is measured |
| `memcache_top_tb` | end to end at a reduced size (64 cache frames, 16-entry Tag Buffer, 50% sampling). A scoreboard checks every command and counts each mechanism (see below), failing if one never happens. |
| `memcache_top_full_tb` | the same scoreboard with the top at its default parameters: the 3/1 GB split, 65536 active sets and the 1K-entry Tag Buffer, 40000 requests, with a repartition to 1.5/2.5 GB (a 2 GB cache) and back. Runs in about a second. |
| `memcache_top_stacksize_tb` | 2 GB and 1 GB stacks (`STACKED_FRAMES` and `CACHE_FRAMES` reduced to match), each starting at 75% memory and repartitioned to 50% or full cache (2 GB), or to 25% or full memory (1 GB). |
| `memcache_top_partition_tb` | four default-parameter designs side by side, each repartitioned at run time: to 2/2, 1/3, 0/4 (full cache) and 4/0 (full memory), and back to 3/1. Every one runs the full scoreboard. |

The mechanisms the end-to-end scoreboard counts are:

- memory-portion accesses and refused addresses;
- cache hits and misses;
- sampled updates, replacements and dirty write-backs;
- Tag Buffer stalls, interrupts and drains;
- channel contention;
- a boundary rewrite, and the dirty pages it writes back.

`tb/memcache_top_harness.sv` is the shared body of both end-to-end tests.
Its parameters set the size, and `DEFAULTS=1` instantiates the top with no
parameter overrides.
