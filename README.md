# A variation-aware last level cache for carbon-nanotube transistors

Carbon-nanotube FETs (CNFETs) are fast and leak little, which makes them
attractive for a large last level cache (LLC). Their weak point is the
nanotube density: how many tubes end up under a transistor's gate varies, and
with it the drive current and the delay. The variation is strongly direction
dependent. Transistors lying along the same tube growth direction share their
tubes and behave alike, while transistors across that direction differ a lot.

In an SRAM array this turns into a structured latency map:

| CNT growth parallel to | Latency alike across | Latency differs across | Name used here |
|---|---|---|---|
| bitlines | the sets of one way | the ways | set aligned: **VASA** (variation-aware set aligned) |
| wordlines | the ways of one set | the sets | way aligned: **VAWA** (variation-aware way aligned) |

A conventional cache is clocked at the worst latency of the whole array: 12
cycles for the set-aligned 2 MB array studied here, where ways range from 6 to
12 cycles, and 10 cycles for the way-aligned one, where sets range from 6 to 10.
This RTL does not. It works out, for every access, the latency of the part of
the array that holds the data. A delay controller then opens the output
multiplexer exactly that many cycles after the request. On top of that, the
cache moves frequently used data to where the array is fast:

* **VASA**: latency-aware *data shuffling* at run time. Recently used blocks
  move into the fastest pair of ways.
* **VAWA**: the operating system maps hot pages onto fast sets. That part is
  software; the hardware only has to find the latency of a set cheaply, which
  it does with *non-uniform grouping*.

The design follows the article "Taming Process Variations in CNFET for
Efficient Last Level Cache Design" (Xu et al.). Where that article leaves a
detail open, the choice made here is stated in the module header and in the
section "Departures and own choices" below.

## Organisation

`cnfet_llc` is the cache. The parameter `LAYOUT` selects the latency mechanism,
because a real chip has one layout or the other:

```
             req ─►┌──────────── cnfet_llc ─────────────────────────────────┐
                   │  way_array x WAYS  (decoder, tag array, data array)    │
                   │        │ tags            │ lines                       │
                   │  tag_compare ─ hit_vec    │                            │
                   │        │                  ▼                            │
                   │  LAYOUT_VASA: vasa_delay_regs ─┐      output MUX ─► rsp│
                   │  LAYOUT_VAWA: vawa_delay_inspection ─► delay_controller│
                   │                                     (enables the MUX)  │
                   │  ds_controller (VASA)  or  lru_replacement (VAWA)      │
                   │  4 shuffle buffers, control FSM                        │
                   └──────────────────────────────────────── mem_req/rsp ──►┘
```

| Module | Role |
|---|---|
| `llc_pkg` | default sizes, the `layout_e` type, the configuration address map |
| `way_array` | one way: set decoder, tag array with valid bit, data array; synchronous read, one write port |
| `tag_compare` | one `=?` comparator per way plus the "bit concat" into a one-hot hit vector |
| `vasa_delay_regs` | one 4-bit latency register per way, selected by the hit vector |
| `vawa_delay_inspection` | set-index run registers and shared comparators that give a set's latency |
| `delay_controller` | counts the cycles of an access and raises the output-MUX enable at the latency |
| `ds_controller` | T priority bits and the plan of the shuffle cascade (VASA) |
| `lru_replacement` | true LRU for the layout without shuffling (VAWA) |
| `cnfet_llc` | top: arrays, latency path, buffers, control FSM |

Default parameters give the evaluated cache: 2 MB, 8 ways, 64-byte lines,
hence 4096 sets, and a 32-bit physical address (14-bit tag, 12-bit index,
6-bit offset). The default layout is VASA with data shuffling (`DS_EN = 1`).
With `DS_EN = 0` the set-aligned cache keeps its per-way latencies but
replaces by true LRU and never moves a block.

## Timing of an access

The variable latency is the point of the design, so it is worth being exact.
Call the clock edge at which `req_valid && req_ready` is sampled edge 0, and the
cycle after edge *k−1* cycle *k*.

1. **Edge 0.** The request is registered. Every way reads the addressed set
   (tag, valid bit and line) from its synchronous array. The T bits or LRU ages
   of the set are read as well. For VAWA, the inspection unit latches the set
   index. The delay controller starts counting.
2. **Cycle 1.** `tag_compare` produces the one-hot hit vector.
   * VASA: the vector selects the hit way's delay register.
   * VAWA: the inspection unit compares the set index with the L1 runs. If
     none matches, it compares with the L2 runs in cycle 2; otherwise the set
     is in the slow group.
   * A miss cancels the delay controller.
3. **Cycle *lat*.** The delay controller raises `enable` and `rsp_valid` goes
   high with the hit way's line on `rsp_data`. The response is taken at edge
   *lat*. A read hit in a 6-cycle way thus answers 6 edges after it was
   accepted. The latency is only known from cycle 1 (VASA) or cycle 2 (VAWA),
   so the shortest latency served is 2 cycles. The real latencies, 6 and up,
   are far above that, so looking up the latency never slows an access.
4. **After the response.** See below for what follows a VASA shuffle, a miss
   and a write.

In this RTL, `way_array` returns its line after one cycle. The slowness of the
CNFET array is what the configured latencies stand for. The RTL enforces it at
the output multiplexer, not inside the array model.

**Misses.** One cycle after the lookup the cache asks memory for the line
(`mem_req_*`). When `mem_rsp_valid` arrives, the line goes straight out on
`rsp_data`, so the miss latency is 2 cycles plus the memory latency. The line
is then installed: by the shuffle cascade (VASA) or into the LRU way (VAWA).

**Writes.** Writes carry a full line and are write-through:
* A write hit updates the line at the latency of its way or set, answers then,
  shuffles if needed, and then passes the line to memory.
* A write miss does not allocate. It answers when memory takes the write.

One request is handled at a time. `req_ready` stays low until the cache is back
in its idle state: after the response, any shuffle and any memory write.

## Data shuffling (VASA)

In the set-aligned layout, a block's latency depends only on the way it sits
in. Shuffling keeps recently used blocks in fast ways. Ordering all 8 ways of a
set by recency would need 3 bits per way and many moves. The cache instead
pairs the ways into 4 groups: G0 = ways 0 and 1, G1 = ways 2 and 3, up to
G3 = ways 6 and 7. Recency is tracked only within a pair, with one bit T per
way:
* T = 0 marks the more recently used block of the pair.
* T = 1 marks the other block. This is the block that leaves the pair when
  another block comes in.

G0 should hold the fastest ways and G3 the slowest. The grouping is fixed by
way number, so the delay registers should be written with that order in mind.

**Hit in way *w* of group *h*.** The block moves to G0 and every group in
between gives up its T = 1 block to the next slower group:

```
buffer g  <- T=1 way of group g      for g < h
buffer h  <- way w
T=1 way of group 0 <- buffer h
T=1 way of group g <- buffer g-1     for 0 < g < h
way w              <- buffer h-1
```

Every way that receives a block gets T = 0 and its partner gets T = 1. A hit in
G0 moves nothing; only the pair's two T bits change. **A miss** is the same
cascade run through all four groups:
* the new line enters the T = 1 way of G0;
* the T = 1 block of G3 falls out and is the victim.

The four cases, starting from T = 0,1,0,1,0,1,0,1 for ways 0..7 (this is also
the reset pattern), except case (b), which starts from the state after (a):

| Case | Blocks moved | T afterwards (way 0..7) |
|---|---|---|
| (a) hit way 1 | none | 1,0,0,1,0,1,0,1 |
| (b) hit way 3 (from the state after (a)) | way 3 → way 0, way 0 → way 3 | 0,1,1,0,0,1,0,1 |
| (c) hit way 7 | 7 → 1, 1 → 3, 3 → 5, 5 → 7 | 1,0,1,0,1,0,1,0 |
| (d) miss | new → 1, 1 → 3, 3 → 5, 5 → 7, old 7 evicted | 1,0,1,0,1,0,1,0 |

`ds_controller` computes this plan combinationally from the set's T bits and
the hit outcome. `cnfet_llc` carries it out in two cycles:
1. `S_SH_CAP` loads the group buffers from the lines all ways read during the
   lookup. Those lines are still on the array outputs: no other read has
   happened since, and every way involved is faster than the hit way, so its
   data has arrived.
2. `S_SH_WR` writes all target ways at once. Each way has its own write port
   and no way is written twice.

The T bits are written back in the same cycle. On a write hit, the buffer that
holds the hit block takes the new line.

Storage matches the hardware cost quoted for the scheme:
* 8 T bits per set: 4096 bytes for 4096 sets;
* four 64-byte buffers plus 8 × 4-bit delay registers: 260 bytes.

## Non-uniform grouping (VAWA)

In the way-aligned layout each of the 4096 sets has its own latency. One
register per set would be costly. Most sets are fast and only a few are slow,
so the cache records only where the fast sets are:
* **Group L1** (6 cycles) and **group L2** (7 cycles) each have `VAWA_PAIRS`
  (16) register pairs (start, end). Each pair marks a run of consecutive sets
  with start ≤ set < end. An empty run has start = end.
* Every other set is in the **Lmax** group (10 cycles), which needs no
  registers.

Finding the runs is an offline search over the measured latency map; the result
is loaded through the configuration port. The two groups share one row of
`VAWA_PAIRS` comparator pairs:
* Cycle 1 checks the L1 runs.
* Cycle 2 checks the L2 runs, only if cycle 1 found nothing.

Checking the faster group first means its answer comes earliest, and neither
answer is needed before cycle 6.

For page mapping to work, a run should cover whole pages. With page size *P*,
*W* ways and line size *L*, that is *G = P / (L·W)* sets, or 8 sets for 4 KB
pages. Nothing in the hardware checks this.

## Configuration

Latencies are measured after fabrication and written once after reset through
`cfg_we`, `cfg_addr` (8 bits) and `cfg_wdata` (16 bits):

| Layout | `cfg_addr` | Register |
|---|---|---|
| VASA | 0 .. WAYS−1 | delay of way n (cycles, 4 bits) |
| VAWA | 0, 1, 2 | latency L1, L2, Lmax |
| VAWA | `{1, grp, pair[4:0], se}` | run `pair` of group `grp`: start (se = 0) or end (se = 1) set index |

The reset values are safe: every way at 12 cycles; L1/L2/Lmax = 6/7/10 with
all runs empty, so every set runs at 10. After reset the cache clears all valid
bits, one set per cycle, which takes `SETS` cycles. `init_done` rises when the
sweep ends; requests are taken from then on.

## Ports of `cnfet_llc`

* `req_valid/req_ready`: request handshake. With it come `req_we`,
  `req_addr` (line-aligned byte address) and `req_wdata` (a full line).
* `rsp_valid`: a one-cycle pulse per request, with no back-pressure. It comes
  with `rsp_data`, `rsp_hit` and `rsp_way`. `rsp_way` is the hit way, or the
  victim way on a miss.
* `shuffle_active`: high during the two shuffle cycles.
* `mem_req_valid/ready`: memory request handshake, with `mem_req_we`,
  `mem_req_addr` and `mem_req_wdata`. Read data comes back as a pulse on
  `mem_rsp_valid` with `mem_rsp_data`. At most one memory request is
  outstanding.

Concurrent assertions inside `cnfet_llc` check four rules:
* a memory request holds until it is taken;
* no response is given while idle or during the valid-bit sweep;
* the hit vector is one-hot;
* the delay controller is counting whenever a hit is waiting for its latency.

## Departures and own choices

Taken from the source description:
* the per-way delay registers, the tag comparators and bit concat, and the
  delay controller enabling the output MUX;
* the four way groups with one T bit each, and the cascade of Fig. 7
  (reproduced case by case above);
* the four shuffle buffers;
* two low-latency set groups of 16 run registers each, compared one group per
  step, fastest first, with `≥`/`<` comparators;
* latencies 6–12 (VASA) and 6/7/10 (VAWA);
* 2 MB, 8 ways, 64-byte lines, LRU as the base replacement.

Choices made here, because the source is silent:
* 32-bit physical address;
* valid/ready handshakes and a single outstanding request;
* full-line write-through without allocation on a write miss;
* the exact cycles of the lookup and of the shuffle (two cycles, after the
  response);
* the post-reset valid-bit sweep and the reset values of the registers;
* the configuration address map;
* invalid lines take part in the cascade like valid ones;
* true LRU (age counters) for the way-aligned cache.

Points where the source contradicts itself, and what was followed:
* **Run registers.** The architecture description has 16 register pairs per
  group. The cost summary counts 128 registers for the two groups, which is
  32 pairs per group. 16 is the default; set `VAWA_PAIRS = 32` for the other
  reading.
* **Lmax registers.** The block diagram of the inspection unit draws a third
  register row for Lmax. The text says that group needs no stored indices.
  The text is followed.
* **Shuffle buffers.** One example speaks of "two registers" for the swap
  buffer. The figure shows four buffers and the cost figure counts four lines.
  Four are built; a one-group move uses two of them.
* **Cache size.** The architecture table writes "2Mb"; the parameter table and
  the text say 2 MB with 4096 sets. 2 MB is built.

Not included:
* **OS page mapping** of hot pages to fast sets or banks. It is software and
  needs no cache hardware.
* **The offline search** that picks the VAWA runs.
* **The latency test** of the fabricated array.
* **The non-uniform cache (NUCA) variant.** It uses 8 of these caches as
  banks on a 2×4 mesh with single-cycle XY routers and 4 cores. The network is
  a standard one; the only new idea there is a latency model that feeds page
  mapping.
* **Comparison designs.** Uniform grouping, partial disabling of slow ways or
  sets, and the worst-timing baseline are not built. The baseline is obtained
  by leaving every latency register at its reset value.

## Simulation

Every testbench in `tb/` checks its outputs against an independent reference
model or fixed expected values. Each ends with a line
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_way_array` | write/read-back of every set, output hold, read-during-write returns old data |
| `tb_tag_compare` | 2000 random tag sets against a reference loop |
| `tb_vasa_delay_regs` | reset value, configuration, selection by every one-hot vector |
| `tb_delay_controller` | enable at exactly edge *lat* for latencies 2–15, latency known in cycle 1 or 2, cancel |
| `tb_vawa_delay_inspection` | group, latency and the cycle (1 or 2) of each answer for 600 lookups against a reference run search; reprogrammed latencies |
| `tb_ds_controller` | the four shuffling cases above, then 2000 random accesses against a block-moving reference; every cascade depth |
| `tb_lru_replacement` | victims over 3000 random accesses against a recency list |
| `tb_cnfet_llc` | both layouts, and the set-aligned one also without shuffling, at 64 sets against a 30-cycle memory model (see below) |
| `tb_llc_latency` | average hit latency of five caches on one reuse-heavy read trace (below) |
| `tb_cnfet_llc_full` | the default 2 MB cache: the 4096-cycle sweep, then 600 checked requests |

`tb_cnfet_llc` runs 1500 requests in each of three caches: VASA with
shuffling, VAWA, and VASA with `DS_EN = 0` (per-way latencies, LRU
replacement, no block moves). For each one it predicts the hit
or miss, the way, the exact latency in cycles and the data, and it checks the
count of memory writes. It also fails unless each mechanism happened at least
once:
* VASA: hits in every group, shuffles, misses with eviction, write hits and
  write misses;
* VAWA: hits in L1, L2 and Lmax sets, and LRU evictions;
* VASA without shuffling: hits in every group, LRU evictions, and no shuffle
  cycle at all.

`tb_llc_latency` shows what the latency mechanisms buy. It runs 3000 reads
over 16 sets, where a few lines per set take most of the accesses. The same
trace goes to five caches, and every hit latency is checked against the
configured value:

| Cache | Average hit latency (cycles) |
|---|---|
| set aligned, all ways at the worst latency | 12.000 |
| VASA: per-way latencies 6,7,8,8,9,10,12,11, LRU | 9.687 |
| VASA with data shuffling | 7.907 |
| way aligned, all sets at Lmax | 10.000 |
| VAWA: 4 sets at 6 and 4 sets at 7 of the 16 used | 8.296 |

The testbench fails unless the averages keep this order. The exact numbers
depend on the trace and on the seed of `$urandom`.

`tb/mem_model.sv` (main memory) and `tb/llc_checker.sv` (stimulus and
reference) are behavioural and used only by testbenches.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/llc_pkg.sv tb/tb_cnfet_llc.sv --top-module tb_cnfet_llc
./obj_dir/Vtb_cnfet_llc
```

Replace `tb_cnfet_llc` with any other testbench name. The full-size run takes
a few seconds. To try the way-aligned cache on its own, instantiate `cnfet_llc`
with `.LAYOUT(llc_pkg::LAYOUT_VAWA)`. Smaller `SETS` values shorten the
valid-bit sweep.
