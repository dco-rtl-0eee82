# DCO: a shared LLC for LLM accelerators, steered by tensor metadata

An accelerator built from many accelerator cores and one shared last-level cache
streams very large tensors through that cache. In FlashAttention-style
kernels, the keys and values of one attention head are read again and
again, and together they are usually larger than the cache. Plain LRU
then thrashes. Each line is evicted just before it would be reused, so
the hit rate collapses.

The software that schedules the kernel knows exactly how each tensor
will be used:

- where the tensor lies in memory;
- how it is cut into tiles;
- how many times every tile will be read;
- whether a tensor is never worth caching.

This design passes that knowledge to the cache through a small side unit,
the **Tensor Management Unit (TMU)**. It then uses it in three ways:

1. **Dead-block prediction.** A tile that has received all its expected
   accesses is dead. Its lines are the first choice of victim.
2. **Anti-thrashing.** The lowest `B_BITS` bits of a line's tag give it a
   priority tier. Lines of the lowest tier present in a set are evicted
   first. Within a tier, LRU decides. Part of the working set is
   therefore always kept, instead of all of it cycling through.
3. **Adaptive bypassing.** Each slice tracks how many lines it evicted
   over a recent window. When evictions rise above a threshold, it
   raises a gear `B_GEAR`. Misses whose tier is below the gear are then
   served from memory without being allocated. When evictions fall,
   the gear falls too. In the `gqa_bypass` variant, only the slower core
   of a core pair has its misses bypassed. A tensor can also be marked
   to bypass the cache entirely.

The RTL is SystemVerilog-2017. The files are in `rtl/`, one module or
package per file, and the self-checking testbenches are in `tb/`.

## System view

```
 host CPU --cmd--> TMU <----- notifications / dead-way queries -----+
                    |  cfg (D_LSB, D_MSB, B_BITS, thresholds, enables) |
                    v                                                  |
 16 accelerator cores <-> llc_xbar <-> 32 x llc_slice (8-way, req/resp queues) -+
      | core_commit                  |  per-slice memory port
      v                              v
 core_pair_monitor (slow flags)   DRAM (outside)
```

`dco_top` contains:

- the crossbar;
- 32 LLC slices;
- the TMU;
- the core-pair monitor.

The host CPU, the accelerator cores and DRAM are outside the design. Their
connections are top-level ports:

- a TMU command port;
- one request/response port and one commit pulse per core;
- one memory port per slice.

The top also exposes statistics outputs:

- per-slice event pulses (hit, miss, bypass, eviction by reason,
  write-back, gear up/down);
- each slice's gear;
- TMU events (tile-last-line counted, tile retired, dead FIFO overwrite,
  table overflow);
- TMU occupancy counts.

### Address map

With the default parameters, a physical address is 48 bits and a line is
128 B. That gives a 41-bit line address, split as follows:

| bits of the line address | use |
|---|---|
| `[4:0]` | slice (32 slices, interleaved line by line) |
| `[11:5]` | set within the slice (128 sets) |
| `[40:12]` | tag (29 bits) |

These widths follow from the parameters. In `dco_top`:

```
TAG_W = 41 - log2(NSL) - log2(NSETS)
```

The default capacity is 32 × 128 × 8 × 128 B = 4 MB. The anti-thrashing
tier is `tag[B_BITS-1:0]`. The tile identifier is
`tag[D_MSB:D_LSB]`. Software places its tensors so that these bit
fields mean something. For example, with `D_LSB = 0` and `D_MSB = 28`,
a tile is one tag value, that is 32 × 128 lines (512 KB).

## The TMU

### Instructions (`cmd`, `tmu_cmd_t`)

| op | fields | effect |
|---|---|---|
| `TMU_REG` | `nacc`, `base`, `bypass`, `tilelen`, `opid` | register a tensor in one of 8 entries; dropped (and `tmu_ev_reg_drop` pulsed) if all are used |
| `TMU_CLEAR` | – | forget all tensors and live tiles, restart the core-pair counts |
| `TMU_SET` | `cfg.d_lsb`, `cfg.d_msb`, `cfg.b_bits` | tile-identifier field and number of tier bits |
| `TMU_SET_BYP` | `cfg.bypass_ub`, `cfg.bypass_lb`, `cfg.en_dbp`, `cfg.en_at`, `cfg.en_bypass`, `cfg.gqa_mode` | gear thresholds and policy switches |

The first three instructions are the paper's. `TMU_SET_BYP` is an
addition of this design: the paper names the thresholds and the policy
combinations but does not say how they are set.

The reset configuration is:

- `D_LSB = 0` and `D_MSB = TAG_W-1`;
- `B_BITS = 3`;
- `bypass_ub = 64` and `bypass_lb = 16` evictions per 256-cycle window;
- all three policies on;
- `gqa_bypass` off.

### Tensors and tiles

The tensor table (`tmu_tensor_table`) matches a line address to the
registered tensor with the greatest base not above it. A tensor's tiles
are runs of `tilelen` consecutive lines, counted from its base.
`tilelen` is in lines and must be a power of two. The line at offset
`tilelen-1` within a tile is its **tile-last-line (TLL)**.

The paper counts accesses per tile and not per line, through the TLL.
Each tile is read as a whole, so one access to its last line stands for
one access to the tile.

### Access counting (`tmu`, `tmu_live_tile_table`, `tmu_dead_fifo`)

Every access a core makes, whether hit, miss or bypass, is reported by
its slice after it has been answered. Each report carries the line
address and tag. The TMU accepts one report per cycle, choosing among
the slices round robin; `ntf_ready` is the grant.

The cycle after a report is accepted:

1. The address is matched to its tensor.
2. If the line is a TLL, the live tile table counts one more access
   (`accCnt`) for the tile identifier `tag[D_MSB:D_LSB]`.
3. If the count reaches the tensor's `nAcc`, the entry is freed and the
   identifier is pushed into the dead FIFO.

A tile is therefore dead two cycles after the report of its last access
is accepted. Some edge cases:

- The live table has 256 entries. When they are all used, a new tile is
  not tracked (`tmu_ev_drop`).
- The dead FIFO holds 16 identifiers and ignores duplicates. When it is
  full, the oldest identifier is overwritten (`tmu_ev_overwrite`).
- `CLEAR` keeps the dead FIFO. Tiles of the previous operator therefore
  stay dead and can still be evicted first.

### Dead-way queries

The dead-way query is combinational. Every way of the set that each
slice is replacing in is compared with all 16 FIFO entries. This is
32 × 8 × 16 identifier comparators. The paper keeps the FIFO small so
that this check fits within the replacement decision's cycle.

## The replacement decision (`victim_select`)

The victim is chosen from one set, in this order:

1. any invalid way;
2. else, if dead-block prediction is on, the dead ways;
3. else, if anti-thrashing is on, the ways whose `tag[B_BITS-1:0]` is
   the lowest present in the set;
4. else, all ways.

Among the candidates, the least recently used way is evicted. LRU is
exact: each way has an age in the set, and a touched way becomes the
youngest.

## Bypassing and the gear

### The bypass decision (`bypass_unit`)

A miss is served without allocation when either of these holds:

- its tensor has the bypass flag;
- dynamic bypass is on and `tag[B_BITS-1:0] < B_GEAR`.

In `gqa_bypass` mode, the second rule also requires that the requesting
core is currently the slower of its pair.

A bypassed read is fetched from memory and returned to the core. A
bypassed write goes to memory. A hit is never bypassed.

### The gear (`gear_ctrl`, one per slice)

Each slice keeps a 256-bit shift register with one bit per cycle, set
when the slice evicted a valid line. A running count of the set bits
gives the number of evictions over the last 256 cycles.

At the end of every 256-cycle period, the gear is compared with the
thresholds:

- if the count is above `bypass_ub`, the gear rises by one, up to
  `2^B_BITS`;
- if the count is below `bypass_lb`, the gear falls by one, down to 0.

A gear of `2^B_BITS` bypasses every tier.

The paper gives the principle: an eviction rate over a sliding window,
upper and lower thresholds, and a gear per slice. The window length, the
threshold values and the one-step-per-window rate are this design's
choices.

### Core pairs (`core_pair_monitor`)

Cores 2k and 2k+1 form a pair. Each core pulses `core_commit` when it
commits an instruction, and the monitor counts these pulses. The core
with the smaller count is "slow". With equal counts, neither core is
slow. `CLEAR` restarts the counts.

## The LLC slice (`llc_slice`)

Each slice is an 8-way, write-back, write-allocate cache of whole
128-byte lines. It has a 12-entry request queue and a 64-entry response
queue. A new request is taken only while the response queue has room.
Only whole lines are stored, so a write miss allocates without fetching.

The slice is **blocking**: it handles one request at a time. Its states:

```
INIT (NSETS cycles after reset, writes the LRU ages)
IDLE -> LOOK -> hit ----------------------------------> RESP -> NTF -> IDLE
             -> miss, bypass -> BYP_REQ -> [BYP_WAIT] -> RESP
             -> miss, allocate -> [WB] -> FILL_REQ -> FILL_WAIT -> RESP
                                       -> INSTALL (write) -------> RESP
```

- `LOOK` compares the tags, decides hit, bypass or allocate, and reads
  the data array once: the hit line, or the victim for a write-back.
- `RESP` pushes the response.
- `NTF` reports the access to the TMU and waits for its grant.

A hit's response is visible to the core three cycles after the slice
accepted the request, plus the crossbar's cycle. Memory answers reads in
order on the slice's memory port.

### Storage

- Tags are one word per set.
- LRU ages are one word per set.
- Data is one line per set and way. It has one write port and one
  synchronous read.

Only the valid and dirty bits are reset.

### Departures from the evaluated system

The evaluated slices have:

- a 6-entry MSHR with 8 targets each, which merges misses to the same
  line and keeps serving hits while misses are outstanding;
- a 25-cycle data latency.

Neither is built. The paper gives the MSHR's size only, so this slice
blocks on a miss. Hit rates and the policies' decisions are unaffected.
Throughput under misses is lower than in the paper's system.

## The crossbar (`llc_xbar`)

The crossbar routes a core's request to slice `laddr[4:0]`. Each slice
has a round-robin arbiter over the cores, and each core has one over the
slices for responses. A core's `ready` is high in the cycle its request
is granted and the slice's queue has room.

The paper draws only a connection between the cores and the cache, so
the crossbar is this design's choice. So are the per-slice memory ports:
the memory controller is outside the design.

## Parameters

| parameter (`dco_top`) | default | origin |
|---|---|---|
| `NSL` | 32 | slices, as evaluated |
| `NC` | 16 | cores, as evaluated |
| `NSETS` | 128 | 4 MB in total; the paper evaluates 1–16 MB (32–512 sets) and 16–64 MB in its analytical study |
| `WAYS` | 8 | as evaluated |
| `NTENSOR` | 8 | tensor entries, as in the paper |
| `NTILE` | 256 | live tile entries, as in the paper |
| `DEAD_DEPTH` | 16 | dead FIFO depth, as in the paper |
| `REQ_Q`, `RESP_Q` | 12, 64 | queue sizes, as evaluated |
| `WINDOW` | 256 | eviction window in cycles; this design's choice |

The shared widths and types are in `rtl/dco_pkg.sv`:

- 48-bit physical address and 128 B lines;
- `nAcc` and tile length 16 bits each;
- up to 4 tier bits.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`, and has a watchdog. With
verilator 5:

```
verilator --binary --timing --assert -Irtl --top-module tb_dco_top \
    rtl/dco_pkg.sv $(ls rtl/*.sv | grep -v dco_pkg) tb/tb_dco_top.sv -Mdir obj -o sim
obj/sim
```

The package must come first. Unit testbenches:

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | random push/pop against a queue model |
| `tb_rr_arbiter` | random requests against a reference round robin |
| `tb_tmu_tensor_table` | matching, TLL flag, full table, CLEAR |
| `tb_tmu_live_tile_table` | counting and retirement against a model, overflow |
| `tb_tmu_dead_fifo` | order, overwrite, duplicates, queries |
| `tb_victim_select` | random sets against a reference policy |
| `tb_bypass_unit` | exhaustive over tiers, B_BITS, gears, enables, gqa mode |
| `tb_gear_ctrl` | gear against a cycle model of the window |
| `tb_core_pair_monitor` | slow flags against a model |
| `tb_llc_xbar` | routing by address, every response back to its core, nothing lost or duplicated |
| `tb_tmu` | one tile's life from registration to a dead way |
| `tb_llc_slice` | directed: miss then hit and the hit latency, tier and dead victims, write-back, whole-tensor and gear bypass |

`tb_dco_top` runs the whole design at a reduced size:

- 4 slices of 8 sets × 4 ways;
- 4 cores;
- a 32-cycle window.

It replays an attention-like workload in three phases.
Software registers Q, K, V and O, and so on; every core then streams
its share of the tiles.

The testbench checks:

- every read against a memory image;
- that every request is answered;
- that these mechanisms each occur at least once: hit, miss,
  whole-tensor bypass, dynamic bypass, gqa restriction, anti-thrashing
  eviction, dead-block eviction, write-back, gear up and down, TLL
  counting, retirement, dead FIFO overwrite, and request back-pressure.

`tb_dco_top_full` instantiates `dco_top` with all defaults: 32 slices,
16 cores and 4 MB. It streams two K tiles of 512 KB and a bypassed O
tile, checking data, hits on the second pass, misses, retirement and
bypassing. It runs in well under a minute.

## Limits

The design has these limits:

- **No MSHR, and the slice blocks on a miss.**
- **The data latency is one array access**, not the evaluated 25 cycles.
- **Only whole lines.** The cores' requests are single 128 B lines. The
  cores' bulk transfers are expected to be split into lines before the
  crossbar.
- **Static bypassing.** The paper's best-case static bypass ("optimal")
  is not a hardware mode. Here the gear always adapts, although software
  can narrow it with the thresholds.
- **The operand id** is stored with each tensor but used by no policy,
  as the paper gives none.
- **Tile tracking.** Tiles beyond 256 live ones are not tracked. FlashAttention
  on very long sequences with small tiles can exceed this, and those
  tiles are then simply never predicted dead.
- **Silicon figures.** The area and timing figures reported for the
  original TMU are not reproduced.
