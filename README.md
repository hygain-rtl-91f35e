# A gain-cell cache hierarchy with a hybrid gain-cell / STT-RAM last-level cache

This RTL models an eight-core cache hierarchy in which every on-chip data array
except part of the last-level cache is built from two-transistor gain cells
(GC) instead of 6T SRAM. A gain cell stores its bit as charge on the gate of a
storage transistor. It needs roughly half the area of an SRAM cell, so the same
silicon holds twice the capacity. The cost is that the charge leaks and the
bit is lost after a data retention time (DRT). Biasing the back gate of an
FDSOI transistor to -VDD while a row is idle stretches the DRT to 1.12 ms,
about 60 times what the same cell retains without the bias. At that DRT
refresh becomes cheap, and for the small caches it can be dropped altogether.

The hierarchy is the "GC-GC-Hybrid" organisation:

| level | per | size | ways | latency | retention handling |
|---|---|---|---|---|---|
| L1-I, L1-D | core | 64 KB each | 16 | 2 cycles | no refresh (line expiry) |
| L2 | core | 512 KB | 16 | 5 cycles | no refresh (line expiry) |
| LLC, GC ways | shared | 8 MB | 16 | 10 cycles | staggered concurrent refresh |
| LLC, STT-RAM ways | shared | 16 MB | 32 | 89 read / 204 write | non-volatile |

There are 8 cores, 64-byte lines and a 3.4 GHz clock. The L1 and L2 sizes are
the iso-area doubles of a 32 KB/8-way L1 and a 256 KB/8-way L2 built from
SRAM. The cores and the DDR3 main memory (4 GB, about 100 ns) are outside the
design and connect through ports.

## How a gain-cell array behaves here

`gc_subarray` is the unit everything else is built from. It is a ROWS x COLS
array (256 x 512 at most), and one row holds exactly one cache line.

**Two independent ports.** The cell has a separate read word line and read
bitline, and a separate write word line and write bitline. The sub-array
therefore has one read port and one write port, and they may work on the same
sub-array in the same cycle. If both address the same row, the read returns the
old value. Read data is registered and appears one cycle after the read word
line.

**Write bitlines keep their value.** After a write, each write bitline keeps
the value it last drove. A later write that puts the same value on a bitline
costs much less energy than one that flips it. The sub-array counts, for every
write, how many bits keep their bitline value and how many flip. These counts
are the hook for the "asymmetric write" energy accounting.

**Back-gate bias per row.** `bgb_hold[r]` is 1 for a row in hold, meaning its
back gate is at -VDD, and 0 for the row being read or written. This is the
digital select for the bias generator. The generator itself is analog and is
not modelled.

**Retention is checked, not simulated as decay.** Each row remembers the cycle
it was last written. A read of a row that is older than DRT cycles raises
`retention_err`, and the caches count these. A correct design must never raise
it, and every testbench checks the count is zero. Real decay would silently
corrupt data, whereas the check points at the exact access that was too late.

### Mapping cache ways onto sub-arrays

`gc_data_array` holds one cache's data. Each way gets its own sub-arrays, and
a set index selects a row:

- If a way is at most 256 lines, it sits in one sub-array with SETS rows. The
  64 KB, 16-way L1 has 64 sets, so each way is a 64 x 512 sub-array.
- If a way is larger, it is spread over SETS/256 sub-arrays of 256 rows. The L2
  has 512 sets, so each way is two 256 x 512 sub-arrays.

A line is therefore never split across sub-arrays, and every sub-array has
the same number of rows. The refresh scheme below depends on that.

## Staggered concurrent refresh (LLC gain-cell ways)

Refreshing a gain-cell row means reading it and writing it back before its DRT
runs out. `gc_refresh_counter` spreads this work evenly:

- **Staggered.** The DRT is divided by the number of rows N. Every DRT/N cycles
  the counter starts the refresh of the next row, round robin. With N = 256
  and DRT = 1.12 ms at 3.4 GHz (3,808,000 cycles), one row starts every 14,875
  cycles (4.375 µs). Every row is then revisited exactly once per DRT.
- **Concurrent.** The same row number is refreshed in all sub-arrays of the
  cache at once, so one counter serves the whole cache.
- **Split across the two ports.** A 3 ns refresh is a 1.5 ns read half
  followed by a 1.5 ns write-back half, each rounded up to 5 cycles (`HALF`).
  During the read half only the read port is taken, and the row of every
  sub-array is captured into a per-sub-array buffer. During the write half only
  the write port is taken, and the buffers are written back on the last cycle.
  A normal write can therefore proceed during the read half, and a normal read
  during the write half.

Two subtleties in `gc_data_array` make this safe:

1. If a normal write lands on the very row being refreshed, between the
   capture and the write-back, the write data is also put into that
   sub-array's refresh buffer. Without this, the write-back would restore the
   stale line.
2. The refresh counter's timer never pauses, so the refresh period is exact.
   A request that meets a busy port simply waits, and the array counts the
   stalled cycles (`stat_refresh_stalls`). A GC hit in the LLC therefore takes
   its nominal latency plus at most one refresh half.

## No-refresh policy (L1 and L2)

The L1s and L2s are never refreshed. Instead a line that has not been written
for close to one DRT is simply dropped (`nrp_tracker`):

- Every line has a 5-bit saturating counter.
- A global epoch tick fires every DRT/32 cycles. On each tick a sweep steps
  through the counters one line per cycle and increments every counter below
  the saturation threshold.
- Writing or filling a line resets its counter to 0. Reads do not, because a
  read does not restore the stored charge.
- When a counter reaches the threshold, the line is reported as expired. The
  cache then invalidates it, writing it back first if it is dirty. The sweep
  waits until the cache has done so.

The threshold is programmable (`nrp_threshold`). With 31, a line is dropped
31–32 epochs after its last write, which is just under one DRT. That leaves
less than one epoch (DRT/32) to finish an expiry. In the full-size design that
is about 119,000 cycles, far more than any miss takes. Smaller thresholds
trade more expiries for more slack. The small testbenches use 12, because
their shortened DRT would otherwise leave less slack than a miss.

## The cache controller (`gc_cache`)

`gc_cache` serves one request at a time. It is used for all L1s and L2s.

- **Tags in SRAM.** `sram_tag_array` keeps valid, dirty, tag and a true-LRU
  age per way. Only the data is in gain cells, so lookup is never blocked by a
  refresh. Replacement takes the first invalid way, otherwise the LRU way.
- **Hits** answer in exactly `HIT_LAT` cycles, counted from the cycle the
  request is accepted. A read hit reads the data array. A store hit merges its
  bytes into the line (read-modify-write) and posts the line through the write
  port, so the response does not wait for the write. A full-line store skips
  the read.
- **Misses** pick a victim and write it back if it is dirty. They then fetch
  the line from the next level, merge any store data, write it into the array
  and answer. A full-line write miss does not fetch.
- **Expiries** reported by the no-refresh tracker take priority over new
  requests. A clean or invalid line is invalidated in one cycle. A dirty line
  goes through the write-back path first.
- **Overlap.** A read of a sub-array while a posted write to it is still in
  flight is counted as an overlapped access. The decoupled ports make it free.

With `RET = RET_REFRESH` the same controller runs on a refreshed array.
`tb_gc_cache` tests both modes.

## The hybrid last-level cache (`hybrid_llc`)

Each of the 8192 sets has 16 gain-cell ways and 32 STT-RAM ways, the ratio of
their capacities. There is one tag array per part, and both are searched in
parallel:

- **GC hit.** The line is read or written in the gain-cell array (10 cycles,
  plus at most one refresh half).
- **STT-RAM hit.** The line is read from STT-RAM (89 cycles) and answered.
  Then it *moves* into the GC ways, replacing the GC LRU line. That displaced
  GC line moves into the STT-RAM way the promoted line just left, a 204-cycle
  write. Hot lines thus end up in the fast, refreshed gain cells. No line is
  ever in both parts, and dirty state travels with a line.
- **Miss in both.** The line is fetched from memory, answered, and placed in
  the STT-RAM LRU way. That victim is written back to memory first if it is
  dirty. A full-line write miss is placed without a fetch.

The STT-RAM ways (`stt_array`) are modelled as an array with the right
latencies, single-ported and not pipelined. The LLC gain cells are refreshed
rather than run under the no-refresh policy. In an LLC, dropping lines becomes
misses to DRAM, which costs far more than the refresh.

## Putting it together (`hygain_top`)

Each core has an L1-I and an L1-D. They share the core's private L2 through a
two-way round-robin `req_arbiter`. The eight L2s share the LLC through an
eight-way `req_arbiter`, and the LLC talks to main memory.

All links use the same protocol:

- A request is `mem_req_t` {write, byte address, 64-bit byte mask, 512-bit line}
  with valid/ready.
- Exactly one response `mem_rsp_t` {512-bit line} comes back per request.
  For a write, the response carries the line after the write.

An arbiter forwards one request at a time and returns its response to the
requester before granting again. There is no coherence between cores, which
matches multi-programmed use.

Event counters (`cache_stats_t`) come out of every cache:

- hits, misses, write-backs, expiries;
- array reads and writes, same-bit and flipped-bit writes, overlaps;
- refresh stalls, refreshes, retention errors;
- migrations, meaning LLC STT-RAM hits.

## Where this RTL departs from the paper

Main departures from the architecture it implements:

- **Cache controller.** It is blocking, with one miss at a time per cache and
  per arbiter. The original evaluation used a cycle-level simulator with
  non-blocking caches; this RTL gives functionally correct behaviour and
  per-access latencies, not its queueing behaviour.
- **Refresh half.** 1.5 ns is 5.1 cycles at 3.4 GHz. It is rounded to 5 cycles
  (1.47 ns).
- **LLC gain-cell latency.** Two figures exist: 10 cycles for the hybrid LLC's
  GC part and 9 cycles for a standalone 8 MB GC cache. The hybrid figure is
  used.
- **Own choices, not specified in the source.** These are:
  - the L2 way count after doubling (16);
  - the LRU policy of the L1s and L2s;
  - the refresh-buffer update on a colliding write;
  - read-modify-write for partial stores;
  - the request/response protocol;
  - the arbiters;
  - the handling of full-line write misses;
  - the reset sweeps.
- **Not modelled.** Energy is not modelled. The same/flipped bit counts and
  access counts are what an energy model would multiply by per-bit energies.
- **Analog and outside parts.** The cell, the back-gate bias generator, sense
  amplifiers and write drivers are represented only by their digital function
  inside `gc_subarray`. The cores and DRAM are outside the design.

## Simulating

Every testbench is self-checking and ends by printing
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_hygain_top -y rtl -y tb \
  rtl/hygain_pkg.sv tb/tb_util_pkg.sv tb/tb_hygain_top.sv
./obj_dir/Vtb_hygain_top
```

The `-y` search paths let Verilator find every module by its file name; the
two packages are listed first. Replace `tb_hygain_top` by any other testbench
name to run it. Each testbench lists what it
checks in its opening comment. The block testbenches shrink the geometry and
the DRT so that many retention periods pass in a short run:

- `tb_hygain_top` runs the whole hierarchy at reduced size: 2 cores, tiny
  caches, DRT = 2560. It is driven from both ports of both cores at once. It
  fails unless every mechanism occurs at least once: L1/L2/LLC hits and
  misses, write-backs, L1 and L2 expiries, LLC refreshes and refresh stalls,
  STT-RAM hits with migration, overlaps, and LLC contention.
- `tb_hygain_top_full` instantiates `hygain_top` with all defaults (8 cores,
  24 MB of LLC). It walks through:
  1. a fetch miss to memory;
  2. a store miss;
  3. a 2-cycle L1-D hit on the stored line;
  4. an LLC STT-RAM hit with migration from another core;
  5. an LLC gain-cell hit from a third core.

  Its Verilator build takes several minutes because of the array sizes; the
  run itself takes seconds.

To try other sizes, override the parameters of `hygain_top` (the sets, ways
and latency of each level, `DRT`, `HALF`, and `L12_RET` to refresh the L1/L2
instead of using the no-refresh policy). Set counts must be powers of two.
