# A self-resizing STT-RAM last-level cache (SMART)

STT-RAM leaks far less than SRAM, so a last-level cache built from it can be
about four times larger in the same area. It still leaks, though. A program
that needs only part of a 4 MB cache pays for all of it. This design shrinks
and grows the cache while the program runs. Every interval of 15 million
instructions it estimates how much energy the memory system (L2 plus DRAM)
would use at each of several cache sizes. It keeps only sizes that cost at
most 2.5 % in execution time and moves to the cheapest one. Unused parts of
the cache are power-gated.

The cache is resized by **cache colouring**, and the size decision comes from
**set-sampled profiling units** together with a **CPI-stack time estimate**.
The RTL here implements the whole on-chip mechanism. It contains the colour-indexed
STT-RAM L2, the mapping table, the five profiling units, the interval
counters, the decision algorithm as a hardware state machine, and the
sequencer that applies a new size. It follows the SMART technique for
STT-RAM LLCs (S. Mittal, Iowa State University). Where that description is
silent, the choices made here are listed at the end.

## 1. Colours, regions and the mapping table

The L2 has 4 MB, 8 ways and 64-byte blocks, so 8192 sets. With 4 KB pages,
the sets split into

    N = cache size / (page size x ways) = 4 MB / (4 KB x 8) = 128 colours

of 64 consecutive sets each. In a conventional cache, the set index of an
address is its bits [18:6]. Bits [18:12] belong to the physical page number,
and they select the colour. This design calls those 7 bits the address's
**region**. A page in region r normally lives in colour r.

The **mapping table** (`color_mapping_table`) has one entry per region and
holds the colour that region actually uses. The L2 builds its set index as

    set = { table[addr[18:12]], addr[11:6] }

To run with `c` colours, every region is mapped onto colours `0 .. c-1`, and
colours `c .. 127` receive no blocks and can be switched off. Here region `r`
maps to colour `r mod c`. A region whose home colour is still active stays
at home, and the others are spread evenly. Because several regions now share
a colour, the L2 tag is the whole physical page number (bits [47:12]). Its low
7 bits are the region, so a line always knows which region it belongs to.

The table changes only between intervals, never on the access path.

## 2. Choosing the size

### 2.1 What is measured during an interval

* `interval_counters` counts cycles, retired instructions, and cycles in
  which the core reports a stall on memory. That stall count is the
  memory-stall component of the core's CPI stack. It also counts the real
  L2's reads, writes, misses and load misses. After `INTERVAL` retired
  instructions it closes the interval. Instructions past the boundary carry
  over into the next interval.
* Five `profiling_unit`s watch every L2 request. Each one is a tag-only copy
  of a cache with 1, 1/2, 1/4, 1/8 or 1/16 of the L2's size, which is 128,
  64, 32, 16 or 8 colours. Each keeps only 1 set in 64 (set sampling). An
  address is looked up only if its block-in-page bits [11:6] are zero. The
  sampled set is then given by the next bits up (bits [12+]). The full-size
  unit keeps 128 sets and the smallest keeps 8, all 8-way LRU. Together they
  hold 1984 tags, under 0.2 % of the cache's bits. Each unit counts misses
  and load misses.

### 2.2 From miss counts to time

Each profiling count is multiplied by 64 to undo the sampling. Miss counts
for colour counts between two profiled sizes are interpolated linearly. The
execution time at `c` colours assumes that memory stall cycles scale with
load misses:

    spm  = stall cycles / load misses of the real cache      (16 fractional bits)
    T(c) = cycles - stall cycles + spm x LM(c)

`LM(c)` is the estimated load-miss count at `c` colours. `spm` comes from a
sequential divider. If the interval had no load miss, `spm` is taken as the
160-cycle memory latency.

### 2.3 The candidates and the two filters

With `cur` active colours, the candidates are

    cur-16, cur-14, ..., cur+16      limited to [N/16, N] = [8, 128]

That is at most 17 sizes (Q+1 with Q = 16). They change the size by at most
16 colours per interval, in steps of 2. The full size is estimated too, as
`T_f = T(128)`. A candidate is dropped if

    (T(c) - T_f) / T_f > lambda = 2.5 %        i.e. T(c)*1000 > T_f*1025

Of the candidates left, the one with the least estimated energy wins. On a
tie, the smaller one wins. If all are dropped, the largest candidate is taken.

### 2.4 The energy model

All values are in femtojoules. One cycle is 0.5 ns (2 GHz).

    E(c) = P_L2 x F_A(c) x T(c)                   L2 leakage
         + E_R x reads + E_W x (writes + M(c))    L2 dynamic (fills count as writes)
         + P_mem x T(c) + E_mem x M(c)            DRAM leakage and accesses
         + E_x x |c - cur| x 512                  block transitions (512 blocks per colour)

    F_A(c) = (c + 31/1024 x (128 - c)) / 128      a gated colour still leaks ~3 %

| constant | value | per |
|---|---|---|
| P_L2 (2235 mW) | 1 117 500 fJ | cycle, whole cache |
| E_R / E_W | 1 015 000 / 1 036 000 fJ | L2 access |
| P_mem (0.18 W) | 90 000 fJ | cycle |
| E_mem | 70 000 000 fJ | DRAM access |
| E_x | 2 000 fJ | block transition |

`M(c)` is the estimated miss count at `c` colours. The arithmetic is 64 to
96 bits wide, so a long interval cannot overflow it. The state machine needs
about 70 cycles for the division and 2 cycles per candidate, so a decision
takes about 100 cycles.

Because a DRAM access costs about 70 nJ, one colour's leakage over a
15-million-instruction interval (20 M cycles or more, about 0.17 mJ) equals
about 2500 misses. So the cache shrinks when the extra misses are few, and it
grows back when they are many.

## 3. Applying a new size

`reconfig_sequencer` holds new L2 requests and waits for the cache to go
idle. Then it takes these steps in order:

1. It switches on the power of any added colours.
2. It rewrites all 128 table entries, one per cycle: `r -> r mod c`.
3. It starts the L2's **flush scan** over every colour that was or will be
   active. For each valid line, the cache looks up the line's region in the
   table (a second read port). If the region no longer maps to the colour
   the line sits in, the line is written back if dirty and then invalidated.
   This one rule covers two cases. The first is the data in colours being
   switched off. The second is lines of regions that moved to newly added
   colours, which would otherwise be stale copies.
4. It switches off the power of removed colours, which now hold no valid
   line.

The scan takes one cycle per way, plus a read and a memory write for each
dirty line. For the full cache that is about 65 000 cycles, which is small
next to an interval of tens of millions of cycles. Requests are held for the
whole operation. No write-back buffer hides the flush latency.

## 4. The cache

`stt_llc` is a blocking, write-back, write-allocate cache with one request in
flight. Its data array is `stt_ram_array`, 65 536 blocks of 512 bits. The
array models STT-RAM with a 1-second retention time at 2 GHz: a read takes
2 cycles (0.973 ns) and a write 12 cycles (5.571 ns). The 1-second retention
is far longer than the typical interval between L2 writes, so the array
needs no refresh and none is built.

| operation | cycles from acceptance to response |
|---|---|
| read hit | 1 tag + 2 read + 1 = 4 |
| write-back hit | 1 tag + 12 write + 1 = 14 |
| read miss | tag, victim write-back if dirty, memory read, respond, then 12-cycle fill |
| write-back miss | allocate without fetching; victim write-back if dirty; 12-cycle write |

Request kinds: `REQ_LOAD` is a demand load (counted for the stall model),
`REQ_IFETCH` is any other read, and `REQ_WB` is a full-block write-back from
L1. After reset, the tag array is cleared by a sweep of one set per cycle
(8192 cycles). `idle` rises when the sweep ends.

## 5. Modules and interfaces

| module | role |
|---|---|
| `smart_pkg` | geometry, timing, algorithm and energy constants; `req_kind_e`, `interval_stats_t` |
| `smart_llc_top` | the whole design |
| `stt_llc` | colour-indexed L2 controller, tag array, flush scan |
| `stt_ram_array` | STT-RAM data array with 2/12-cycle read/write |
| `color_mapping_table` | region-to-colour table, 2 read ports, 1 write port |
| `profiling_unit` | sampled tag directory of 1/DIV the cache size; miss and load-miss counters |
| `interval_counters` | interval boundary and CPI-stack/L2 event counters |
| `energy_saving_algorithm` | time and energy estimates, candidate filter, choice |
| `reconfig_sequencer` | power-up, remap, flush scan, power-down |

The ports of `smart_llc_top`:

* **L1 side:** `req_valid/req_ready`, `req_addr[47:0]`, `req_kind`, and
  `req_wdata[511:0]`. Responses come on `resp_valid`, `resp_hit` and
  `resp_rdata`. Each request gets exactly one response; for a write-back it
  is an acknowledgement.
* **Memory side:** `mem_req_valid/ready`, `mem_req_we`, `mem_req_addr`,
  `mem_req_wdata`, `mem_resp_valid` and `mem_resp_rdata`. Reads are
  answered later, one at a time.
* **Core:** `instr_ret[2:0]` (instructions retired this cycle) and
  `mem_stall` (the core is stalled on memory this cycle).
* **Power:** `power_on[127:0]`, one enable per colour for the power-gating
  switches, which are outside this RTL.
* **Status:** `active_colors`, `interval_end`, `decision_*` (the chosen
  size, its estimated energy, and how many candidates were evaluated and
  rejected), `reconfig_done`, `ev_writeback` and `ev_flush`.

Every module starts with a comment block covering its timing.

## 6. Parameters

The defaults are the evaluated configuration. `smart_llc_top` takes
`NUM_COLORS`, `SETS` (keep `SETS = 64 x NUM_COLORS`, so that a colour is
exactly one page's worth of sets), `INTERVAL`, `CLOW` (N/16), `Q` and
`RET_W`. Everything else is in `smart_pkg`: the physical address width, the
latencies, lambda, the sampling ratio and the energy constants.

## 7. Choices made here

The description of the technique fixes the sizes, the candidate rules, the
thresholds and the energy model. This design adds the following.

* **Profiling:** the sampled sets are those of block 0 of each page. The
  profiling units have the L2's 8 ways. Sizes between the five profiled ones
  are interpolated linearly.
* **Estimates:** with no load miss in an interval, 160 cycles of stall are
  assumed per miss. Fills count as L2 writes in the energy model, and
  write-backs are not counted as DRAM accesses. Gated colours leak 31/1024
  of their power.
* **Choosing a size:** ties go to the smaller cache. If every candidate is
  too slow, the largest candidate is taken. An interval that ends while the
  previous decision is still being applied is skipped.
* **Regions and colours:** region `r` maps to colour `r mod c`, and colours
  `0 .. c-1` are the active ones. Lines of moved regions are flushed, not
  only those of removed colours.
* **Cache controller:** it is blocking, with requests held during a
  reconfiguration and no write-back buffer or MSHR. L1 write-backs allocate
  without a fetch. The tags are cleared by a sweep after reset.
* **Power gating:** a colour wakes up at once.
* **Widths:** the physical address has 48 bits, counters 48 bits and energy
  96 bits. The decision algorithm is hardware; it could equally run as
  software on the same counters.
* **Conflicting figures:** the interval is 15 M instructions; another figure
  given for it is 10 M. The write latency is the stated 12 cycles, where
  5.571 ns would round to 12 as well. With 8 ways there are 128 colours; a
  16-way example in the description has 64.

Not part of the RTL: the processor core and its L1 caches, the DRAM, the
power-gating switches and the STT-RAM cell itself. The top brings their
signals out as ports. The testbenches contain simple models of the core and
of memory.

## 8. Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_stt_ram_array` | contents, 2-cycle read and 12-cycle write latency |
| `tb_color_mapping_table` | identity after reset, writes, both read ports |
| `tb_profiling_unit` | miss and load-miss counts against a reference LRU model, sampling, eviction order |
| `tb_interval_counters` | every counter and the boundary carry-over against reference counts |
| `tb_energy_saving_algorithm` | decisions against a floating-point model: shrink, growth, floor, all rejected, no load misses, random cases; candidate counts; latency |
| `tb_reconfig_sequencer` | table contents, power mask before and after the scan, scan width, hold |
| `tb_stt_llc` | data against memory, hit/miss against a reference cache, hit latencies, victim write-backs, the flush scan after a remap |
| `tb_smart_llc_top` | 1 MB, 32 colours, 20 000-instruction intervals: shrink to the floor, grow back for a large working set, shrink again; data checked throughout |
| `tb_smart_llc_top_full` | full size, one 15 M-instruction interval: 128 -> 112 colours, flush, data read back |
| `tb_workloads` | three synthetic programs from reset on the 1 MB instance: streaming (every block new) and an 8-page working set must end at the 2-colour floor, a 160-page cyclic sweep at full size; prints active ratio and hit ratio |

To run one with Verilator 5 (put the package first):

    verilator --binary --timing --assert -Wno-fatal \
        rtl/smart_pkg.sv rtl/stt_ram_array.sv rtl/color_mapping_table.sv \
        rtl/profiling_unit.sv rtl/interval_counters.sv rtl/energy_saving_algorithm.sv \
        rtl/reconfig_sequencer.sv rtl/stt_llc.sv rtl/smart_llc_top.sv \
        tb/tb_smart_llc_top.sv --top-module tb_smart_llc_top -Mdir obj
    ./obj/Vtb_smart_llc_top

The reduced end-to-end test takes a few seconds. The full-size test runs
about 2.2 million cycles and also finishes in seconds. The testbenches use
only `$urandom`, with no constraints.
