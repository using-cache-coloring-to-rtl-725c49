# Wear-levelling a non-volatile last-level cache by remapping cache colours

Non-volatile memories such as STT-RAM make dense, low-leakage last-level caches,
but each cell survives only a limited number of writes. Ordinary cache policies
ignore where writes land, and real programs write some sets far more often than
others. The most-written set wears out first and takes the whole cache with it.

This design spreads the writes by moving whole groups of sets. The cache is cut
into *colours*. A colour is the set of cache sets that one page-sized slice of
memory can reach. The physical pages are cut into as many *memory regions*,
chosen by the low bits of the page number. A small table says which colour
each region currently uses. The hardware counts the writes to every colour. Every
so often a remapping step compares the counts. It then moves the regions that
were written hardest in the last interval onto the colours that have been
written least so far. A colour whose region changes is flushed first.

The RTL describes a 4 MB, 16-way STT-RAM LLC with 64-byte lines and 4 KB pages.
That is 64 colours of 64 sets each. The remapping algorithm runs as a hardware
sequencer next to the cache controller.

## Address mapping

The number of colours is

    N = cache size / (page size x associativity) = 4 MB / (4 KB x 16) = 64

and a 48-bit physical byte address is split as

    [47:18] tag | [17:12] region | [11:6] set within colour | [5:0] line offset

A plain cache would use bits [17:6] as the 12-bit set index. Here the region
field goes through the mapping table, and the set index becomes
`{colour_of_region[region], set_within_colour}`.

The tag does not have to include the region bits. A colour holds exactly one
region at a time, and it is flushed before its region changes. So every valid
line in colour c belongs to region `region_of_color[c]`. Tag matching is the
ordinary one. A dirty line's memory address is rebuilt from its tag, the region
its colour holds, and its set within the colour.

The mapping table (`color_map_table`) stores the permutation twice, once in each
direction. Both lookups are therefore combinational. A swap of colours c1 and c2
turns the pairs (r1,c1),(r2,c2) into (r1,c2),(r2,c1) in both tables in one
cycle. After reset the mapping is the identity.

## When remapping runs

The interval is counted in writes, not cycles. That way a write-heavy program
gets remapped more often. `interval_trigger` counts LLC writes. At every K-th
write it checks whether at least 3,000,000 cycles have passed since the last
run:

* if yes, it pulses `start`, and the cycle count starts again;
* if not, it pulses `deferred` and does nothing else; the next check comes after
  the next K writes.

The interval write counts keep growing across a deferral. An interval ends only
when the algorithm actually runs. K is 32768 in this design; it is a parameter.

A "write" is any write into the data array, either a write hit or a line fill.
These are the events that wear cells. `llc_ctrl` reports each one with its colour.
`color_write_counters` keeps two saturating counters per colour:
`nWriteGlobal` (32 bit, since reset) and `nWriteLastInterval` (24 bit, since the
last run).

## The remapping algorithm (`wl_engine`)

This is the hardest part of the design. Once started, the engine waits until
the cache is idle. From then until it finishes, the cache takes no new requests.
It then runs these phases:

| phase  | cycles | work |
|--------|--------|------|
| STATS  | N      | one colour per cycle: S1 += n, S2 += n^2 over the interval counts |
| CHECK  | 1      | return if the standard deviation is below beta |
| RANK   | N      | one colour per cycle: its position in list L1 and list L2; count nHigher |
| SETUP  | 1      | nColorToSwap = MAX(nHigher, lambda) |
| SWAP   | per pair | flush L1[k], flush L2[k], swap their regions |
| FINISH | 1      | clear the interval counters |

**Standard-deviation test without a square root.** SDW is the population
standard deviation of the interval counts, and AVG = S1/N. The test SDW < beta is
the same as

    N*S2 - S1^2  <  N^2 * beta^2        (beta = 75, so the bound is 23,040,000)

This is exact integer arithmetic on at most 61-bit values. A run that stops here
takes N + 3 cycles from `start` to the counter clear (67 cycles for N = 64), if
the cache is already idle.

**Sorting by ranks.** L1 lists the colours by decreasing interval writes. L2
lists them by increasing total writes. There is no sorting network. Instead, in
cycle i the engine compares colour i's counts with those of all N colours, so it
needs 2N comparators. The result is colour i's rank in each list, and the engine
stores `L1[rank1] = i` and `L2[rank2] = i`. Equal counts are ordered by colour
index, so the ranks always form a permutation. The same pass counts nHigher, the
colours above the average, by testing `n_i * N > S1` exactly.

**Swapping.** For k = 0 .. nColorToSwap-1 the engine takes colour pair
(L1[k], L2[k]). If both entries are the same colour, it skips that k. Otherwise:

1. it flushes colour L1[k], holding `flush_req` until `flush_done`;
2. it flushes colour L2[k] the same way;
3. it swaps the two colours' regions in the mapping table.

The flushes come before the swap so that dirty lines go back to the addresses of
their old region. The swaps run one after another, so a colour may appear in
several pairs. nColorToSwap uses MAX(nHigher, lambda) with lambda = N/4 = 16,
as the algorithm is written. The source also calls lambda "the upper limit" on
the number of swaps. That reading would need MIN, and it is not what is built
here (see Departures). lambda may not exceed N/2; `wl_engine` stops
elaboration with an error if it does.

**Flush cost.** One colour is 64 sets x 16 ways = 1024 lines. The controller
checks one line per cycle. A clean or invalid line is dropped in that cycle. A
dirty line costs an array read (2 cycles) plus a memory write. A colour flush
therefore takes at least about 1030 cycles. In the full-size test, one run made
16 swaps and 32 flushes of colours full of dirty lines. It kept the cache busy
for about 74,000 cycles, which is 2.5% of the 3M-cycle minimum interval.

## The cache controller (`llc_ctrl`)

The controller is a blocking write-back, write-allocate cache with true LRU. It
serves one request at a time over line-wide ports.

* **Hit.** A read hit returns the line from the array. A write hit writes the
  whole line into the array and marks it dirty.
* **Miss.** The victim is the first invalid way; if every way is valid, it is
  the way with the oldest age.
  - A dirty victim is read from the array and written back to memory.
  - On a read miss, the line is then fetched from memory and written into the
    array.
  - On a write miss, the request already carries the full line, so it is written
    straight into the array without a fetch.
* **LRU.** Each set keeps a 4-bit age per way; 0 is the most recently used. On
  each use, the used way goes to 0 and every younger way ages by one. The ages
  stay a permutation. After reset, a walk of 4096 cycles (one set per cycle)
  invalidates all tags and loads the ages 0..15.
* **Flush.** The controller walks the 64 sets x 16 ways of the colour. It writes
  back the dirty lines and invalidates every line.

The tag and age arrays are row memories, written one set row at a time. At most
one tag row and one age row change per cycle.

Request timing, counted from the clock edge that accepts the request to the edge
that raises `resp_valid`:

* read hit: 3 + RD_LAT = 5 cycles;
* write hit: 3 + WR_LAT = 15 cycles;
* misses add the write-back and the memory latency.

`req_ready` is high only when the controller is idle, `hold` is low and no
flush is pending.

## STT-RAM array (`sttram_array`)

This is a behavioural model of the non-volatile data macro, not logic meant for
synthesis as it stands. It holds 65536 lines of 512 bits, and it runs one
operation at a time:

* a read answers with `rvalid` 2 cycles after it is accepted;
* a write pulses `wdone` 12 cycles after it is accepted.

These are the latencies of a 1-second-retention STT-RAM at 2 GHz: 0.973 ns for
a read, rounded up to 2 cycles, and a 12-cycle write.

## Top level (`wl_llc_top`) and its ports

| group | signals | protocol |
|-------|---------|----------|
| upper level | `req_valid/ready/write/addr/wdata`, `resp_valid/rdata` | request held until `req_ready`; response is a one-cycle pulse; a write also gets a response (acknowledgement) |
| memory | `mem_req_valid/ready/write/addr/wdata`, `mem_resp_valid/rdata` | request held until `mem_req_ready`; read data comes back later with a one-cycle `mem_resp_valid` |
| observation | `wl_busy`, `wl_start`, `wl_deferred`, `wl_skipped`, `wl_swap`, `wl_flush_done`, `wl_wr_event`, `wl_wr_color`, `wl_n_swapped` | one-cycle event pulses, plus the number of swaps done by the last run |

The processor with its L1 caches and the DRAM are outside the design. They
connect through the two request ports.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| cache size, ways, line | 4 MB, 16, 64 B | the source configuration |
| colours N | 64 | from the formula above (the source gives 64 for this cache) |
| page size | 4 KB | implied by N = 64 |
| beta | 75 | the source configuration |
| lambda | N/4 = 16 | the source configuration |
| minimum interval | 3,000,000 cycles | the source configuration |
| K (writes per interval check) | 32768 | this design's choice; not given |
| RD_LAT / WR_LAT | 2 / 12 cycles | STT-RAM figures at 2 GHz |
| address width | 48 | this design's choice |
| counter widths | 32 / 24 bits | this design's choice |

Cache-wide constants live in `rtl/wl_pkg.sv`. Every module takes its sizes as
parameters with those defaults, and `wl_llc_top` passes them down.

## Departures and own choices

* **MAX vs. MIN.** The number of swaps per run is MAX(nHigher, lambda), as in
  the algorithm's steps. Its prose calls lambda an upper limit, which would be
  MIN. To get that behaviour, change one line in `wl_engine` (state `S_SETUP`).
* **Hardware, not software.** The algorithm was meant to run as an operating
  system kernel module. Here it is a hardware sequencer. The cache stops
  accepting requests while it runs, which is also this design's choice.
* **STT-RAM write latency.** The write takes 12 cycles, the figure given for the
  1-second-retention cell at 2 GHz. The quoted 5.571 ns would round to 11 or 12
  cycles. The retention time is not modelled: a 1-second cell written at these
  rates needs no refresh, and none is built.
* **Own choices:** the request and memory handshakes, the one-request-at-a-time
  controller, write-allocate without a fetch for full-line writes, and counting
  fills as writes.
* **Not included:** the processor, the L1 caches and the main memory. There is
  no model of energy or lifetime. The array model has no banking and does not
  overlap operations.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_color_map_table` | identity after reset; 300 random swaps, some with both colours equal; both lookups against a reference permutation |
| `tb_color_write_counters` | random skewed writes; clears with a coincident write; all 128 counters against a model |
| `tb_interval_trigger` | K = 100, 1000-cycle minimum; fast and slow write phases; exact cycle of each `start` and `deferred` against a model; both outcomes seen |
| `tb_wl_engine` | 30 runs with uniform, few-hot and many-hot counts; the exact sequence of flushes and swaps against a floating-point reference of the algorithm; skip-run latency N+3 |
| `tb_sttram_array` | data and exact read and write latency |
| `tb_llc_ctrl` | small cache (4 colours x 4 sets x 4 ways); random traffic over twice the capacity; colour flushes and swaps in between; data checked on every read and in memory after a final flush; hit latencies; array writes = write requests + fills |
| `tb_wl_llc_top` | whole design at 16 colours, K = 2000, 100,000-cycle minimum; hot and uniform phases; every read checked; counts fills, write-backs, deferrals, runs, skipped runs, swaps, flushes and stalled requests, and fails if any is zero |
| `tb_wl_lifetime` | two copies of the 16-colour design, one with remapping disabled (K too large to be reached), run the same 40,000 accesses with 80% of writes going to two regions; per-line array writes are counted; relative raw lifetime (largest per-line count of the plain copy / of the wear-levelled copy) must exceed 1.5 (it comes out at about 4.4) |
| `tb_wl_llc_top_full` | whole design at its default (full) size: a deferral, then the first run after 3M cycles with 16 swaps and 32 flushes, then every written line read back; about 5 s of simulation |

`tb/mem_model.sv` is the behavioural main memory used by the cache tests. A
line that has never been written reads as a pattern derived from its address.

To simulate, for example the full-size test, with Verilator 5:

    verilator --binary --timing --assert -y rtl rtl/wl_pkg.sv \
        tb/mem_model.sv tb/tb_wl_llc_top_full.sv --top tb_wl_llc_top_full
    ./obj_dir/Vtb_wl_llc_top_full

`-y rtl` lets Verilator find each module in `rtl/<name>.sv`. The package must
be named explicitly. Any other testbench builds the same way with its own file
and top (`tb/mem_model.sv` is only needed by the cache-level tests).

**How far to trust it.** The remapping algorithm is checked step by step
against an independent model. Cache data integrity is checked across many
remaps. The wear-levelling effect is shown only on synthetic traffic, in
`tb_wl_lifetime`. Lifetime gains on real programs have not been measured with
this RTL, because no program traces are simulated. The tag, age and data arrays are written as plain arrays. A real
implementation would replace them with SRAM and STT-RAM macros.
