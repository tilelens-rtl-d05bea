# Tile-major TMA and HBF memory-side support

High-Bandwidth Flash (HBF) and other large-granularity memories (LGMS) deliver data only in
4 KB pieces. A GPU matmul that keeps its weight matrix in the usual column-major layout
asks for a compute tile whose columns are short runs of a few hundred bytes, each in a
different 4 KB page. Every page read then brings in 4 KB to use a small part of it. That is
*read amplification*, and it wastes most of the flash bandwidth.

The cure is a **tile-major layout**. The matrix is cut into *memory tiles* of a x b
elements with a·b·s = 4096 bytes (s = element size). Each memory tile is stored as one
contiguous 4 KB page, column-major inside. The tiles are ordered column-major across the
matrix. A compute tile that covers whole memory tiles then reads whole pages, with no
waste.

Changing a layout normally means rewriting every kernel's address arithmetic. This design
puts the change inside the GPU's Tensor Memory Accelerator (TMA) instead. A kernel gives the
TMA logical coordinates, not addresses, so the TMA alone maps indices to addresses. Two
extra descriptor fields switch that mapping to tile-major:
- the memory tile shape (a, b);
- the matrix's leading stride K.

The kernel binary does not change. Around the TMA, the memory side of an HBM+HBF GPU gets
three more parts, which HBF's 4 KB pages and microsecond latency make necessary:
- an MSHR with a 4 KB partition;
- an L2 insertion path that installs whole 4 KB blocks;
- a stride prefetcher whose degree adapts to how many thread blocks are still running.

All of it is synthesizable SystemVerilog in `rtl/`, with a self-checking testbench per
block in `tb/`.

## The tile-major address

Take a K x N matrix (K rows, contiguous) with memory tile (a, b). Element (i, j) has the byte
offset

```
offset = ((j / b) * (K / a) + i / a) * 4096  +  ((j mod b) * a + i mod a) * s
```

The TMA only ever starts a load at a memory-tile boundary in the row direction, and at
a multiple of b in the column direction. The tile base then simplifies to

```
tileBase = globalBase + (K*j + i*b) * s
```

The column-major base is `(K*j + i) * s`. The only difference is that the row index is
shifted left by log2 b. Both a and b are powers of two.

Two conditions are required of the data:
- K must be a multiple of a, and N a multiple of b. Pad the matrix if it is not.
- The base address must be 4 KB aligned.

## Address generation in the TMA (`tilelens_tma`)

The TMA works in two phases. Phase 1 computes the tile base from the coordinates. Phase 2
sweeps the box with nested counters and issues one memory request per box row of u
elements (u·s bytes: 32, 64 or 128). The extension touches only the source address. The
shared-memory destination still just increments by u·s per request.

### Phase 1: one view, many descriptors (`split_sum`, `tilebase_unit`)

A programmer can describe the same matrix to the TMA in several ways. For example, an FP8
384 x 128 matrix read at (256, 64) with a 128 x 64 box can be given as:

| view | tensor dims   | strides          | coordinates  | box           |
|------|---------------|------------------|--------------|---------------|
| 2-D  | 384,128       | 1,384            | 256,64       | 128,64        |
| 3-D  | 128,128,3     | 1,384,128        | 0,64,2       | 128,64,1      |
| 4-D  | 128,64,3,2    | 1,384,128,24576  | 0,0,2,1      | 128,64,1,1    |

The hardware must not care which view is used. The key fact is this: moving from one
column to the next skips at least K elements. So any dimension whose stride is ≥ K moves
along columns, and any dimension with a smaller stride moves along rows.

`split_sum` compares each dimension's stride with K. It sends each coordinate×stride product
to one of two adder trees:
- the row sum i: dimension 0, plus every dimension with stride < K;
- the column sum K·j: all the others.

`tilebase_unit` then forms `globalBase + ((K·j) + (i << log2 b)) << log2 s`. In column-major
mode it forms `globalBase + (i + K·j) << log2 s`. The multipliers and the final adder are the
ones a plain TMA already needs. The extension adds:
- the comparators;
- the second adder tree;
- one variable shift.

### Phase 2: the counter programme (`counter_reconfig`, `addr_counter_engine`)

In column-major order, the counter for the stride-K dimension steps v times by K. In
tile-major order, consecutive columns of one memory tile are only a elements apart. After b
columns the next memory tile starts b·K elements further on. `counter_reconfig` therefore
replaces that one counter with two nested counters:

```
stride K, extent v   ->   (stride a, extent b) inside, then (stride b*K, extent v/b)
```

Other dimensions are handled as follows:
- stride below K (rows of a higher-dimensional view): stride scaled by b, the same factor
  as i in the tile base;
- stride above K: left unchanged.

The programme is at most MAX_CNT = 6 counters deep. `addr_counter_engine` runs it:

```
srcAddr = tileBase + (Σ cnt[k]·stride[k]) << log2 s
dstAddr = smem_dst + n·u·s
```

It issues one request per cycle, innermost counter first, under a valid/ready handshake.

### Wide memory tiles: the bit swap (`tile_bit_swap`)

A memory tile may be taller than the box (a > u). In BF16 a 64-element box row is 128 B,
while a 4 KB tile could be 256 x 8. The engine then computes every address as if the memory
tile were u x b. It only has to correct the offset inside the 4 KB tile afterwards. Because
u, a and b are powers of two, that correction is a permutation of address bits. Written
from the top bit down:

```
as computed:   [ sub-tile : log2(a/u) | column : log2 b     | row : log2(u*s) ]
correct:       [ column   : log2 b    | sub-tile : log2(a/u) | row : log2(u*s) ]
```

Example: an FP8 32 x 32 box inside a 128 x 32 memory tile turns `(sub2 | col5 | row5)` into
`(col5 | sub2 | row5)`. `tile_bit_swap` builds the result from masks and variable shifts.
Bits above the 4 KB tile pass through unchanged, which is why the base must be 4 KB
aligned. `counter_reconfig` uses a' = min(a, u) for the inner stride, so the programme
matches the u x b assumption.

### What is rejected

The engine refuses a tile-major load, pulsing `done` and `err` without issuing requests,
when:
- a < u;
- u is not a power of two;
- no dimension has stride K;
- the box extent along the column dimension is not a multiple of b.

These cases fall outside the scheme. A load with `tile_major = 0` behaves as a plain TMA.

### Timing

| event | cycle |
|---|---|
| command accepted (`cmd_valid && cmd_ready`) | t |
| tile base registered | t+1 |
| first request | t+2 |
| further requests | one per cycle while `req_ready` is high |

`done` pulses for one cycle after the last request is accepted. The request must stay stable while it waits
for ready; an assertion checks this. The extension adds no cycles over column-major mode.
The whole phase-1 arithmetic sits in one combinational cycle. A real TMA would pipeline
the multipliers; the added comparators and shift are estimated at a few extra cycles,
which this RTL does not model.

## Memory side of an HBM+HBF GPU

Weights are read-only during inference, so they go to HBF. Activations and the KV cache go
to HBM. The choice is made per tensor at allocation. In `tilelens_top` it is one address
range, `[cfg_hbf_base, cfg_hbf_limit)`.

### Mixed-granularity MSHR (`mixed_mshr`)

HBF reads take microseconds. An MSHR that tracks 128 B lines would fill up long before
enough HBF reads were in flight. The MSHR is therefore split into two partitions:
- HBM: HBM_ENTRIES entries tagged by 128 B line;
- HBF: HBF_ENTRIES entries tagged by 4 KB page.

Each HBF entry covers 32 times more data. Lookups are fully associative. A request that
matches an outstanding entry merges into it. A demand merge increments the entry's waiter
count; a prefetch merge adds nothing. A request that needs a new entry stalls when its
partition is full or its memory port is busy.

A fill (`fill_valid`, `fill_hbf`, `fill_id`) frees the entry and reports the block and its
waiter count on `done_*`. An entry that is being freed cannot be matched in the same cycle.

### Whole-block L2 insertion (`l2_block_fill`)

When a 4 KB HBF page returns, all of it goes into the L2: 32 lines of 128 B, one per cycle.
With tile-major layout the whole page belongs to the compute tile, so the tile's other
requests hit. An HBM fill inserts one line.

While a block is being inserted, `blk_busy`, `blk_base` and `blk_hbf` describe it. The top
uses them to hold a request to that block until its lines are in the L2. Without this, the
request would miss, allocate a new entry and read the page from flash a second time.

### Adaptive stride prefetcher (`hbf_prefetcher`)

A tiled matmul walks the weights along K in fixed steps. Every demand page is followed by
pages one step (`cfg_stride` bytes) apart. On each trigger the prefetcher issues the pages
at distance 1..d. The degree is

```
d = min( floor(2·BL / (active_CTAs · p_tile)),  K/TILE_K )
```

The terms are:
- BL: the bandwidth-latency product in 4 KB requests (`cfg_bl`).
- p_tile: requests per compute tile.
- active_CTAs: the number of thread blocks running (N_SM·C_SM when the GPU is full). It is
  counted from `cta_launch`/`cta_retire` pulses.
- The factor 2: a margin for NAND plane conflicts.
- The cap K/TILE_K (`cfg_k_iters`): keeps prefetches inside the tensor.

Each wave of demands must keep BL requests in flight. As blocks retire, fewer demands
arrive, so the degree grows. This keeps the flash bus busy while the last straggler blocks
finish. The division is a restoring divider. It restarts whenever an input changes and
settles in 32 cycles. Until then the previous degree stays in use. With no active CTA the
degree is the cap.

An SRAM latency-hiding buffer may sit on the HBM base die (`cfg_sram_en`). If so, the stream
is twice as long:
- distances 1..d go to the L2 (through the MSHR);
- distances d+1..2d go to the buffer (`pf_sram`, leaving the top on `sram_pf_*`).

One trigger is served at a time. A trigger is any demand access to a 4 KB HBF page other
than the last triggering page, whether it hits in the L2 or misses. Hits must trigger too.
Once the stream runs ahead, the demands hit in the L2, and only those hits keep the
stream going. A prefetch that hits in the L2, or merges into an MSHR entry, costs one
cycle and reads nothing.

## The top (`tilelens_top`)

A request takes the following path:
1. The TMA issues the request.
2. The arbiter takes an L2-tier prefetch first, then a TMA demand.
3. The L2 is looked up on `l2_lookup_*`. The caller answers in the same cycle, and a hit
   ends the request.
4. The address range selects HBM or HBF.
5. The MSHR merges the request or allocates an entry, and the read leaves on `hbm_mem_*`
   or `hbf_mem_*`.
6. The fill returns on `fill_*` and is inserted on `l2_ins_*`.

A prefetch is dropped if any of these holds:
- it hits the L2;
- its block is being inserted;
- it lies outside HBF.

A demand that would trigger the prefetcher waits while the prefetcher is still busy with
the previous trigger. The TMA side is stalled in that case, and also when the MSHR is full,
a memory port is busy, or the request's block is still being inserted. `stat_*` counts:
- TMA requests that hit in the L2;
- merges;
- stalled TMA cycles;
- issued prefetches.

Parts outside the design connect through ports:

| outside part | ports |
|---|---|
| L2 tag and data arrays | `l2_lookup_*`, `l2_ins_*` |
| HBM and HBF stacks | `*_mem_*`, `fill_*` |
| SRAM buffer | `sram_pf_*` |
| SMs | TMA command ports, `cta_launch`/`cta_retire` |

`tma_req_fire` and `tma_req_o` show each TMA request with its shared-memory destination.
The data return into shared memory, with its swizzling, is the unchanged part of a TMA and
is not modelled.

One instance of the top stands for one memory controller. Its parameters are:
- `HBM_ENTRIES` = 64 and `HBF_ENTRIES` = 64 (MSHR entries per partition);
- `DEG_W` = 16 (degree width).

The package `tilelens_pkg` fixes the remaining sizes:
- 5 tensor dimensions;
- 32-bit coordinates and strides;
- 48-bit byte addresses;
- 24-bit shared-memory addresses;
- 4 KB pages and 128 B lines.

## Sizing against the evaluated workloads

The evaluated system has 4.915 TB/s of HBF bandwidth. At 5 µs NAND latency that is
BL = 4.915e12 × 5e-6 / 4096 ≈ 6000 pages in flight. Spread over 96 HBF channels (6 stacks ×
16), that is about 63 pages per channel, so one 64-entry HBF partition per channel holds it.

| NAND latency | pages per channel | fits in 64 entries? |
|---|---|---|
| 1 µs | 12.5 | yes |
| 2 µs | 25 | yes |
| 5 µs | 63 | yes |
| 10 µs | 125 | no: set `HBF_ENTRIES` = 128 |
| 20 µs | 250 | no: set `HBF_ENTRIES` = 256 |

The per-channel split is an assumption: the MSHR size is not given. The matrix shapes
evaluated fit easily in 32-bit coordinates and strides and 48-bit addresses. These are
MoE experts and 8192 x 28672 FFN weights in BF16, with memory tile 64 x 32 and box rows of
64 elements, so a = u. Memory tiles taller than the 128 B box row use the bit swap.

## Behaviour on the evaluated workloads

Two more testbenches run the design on the evaluated weight streams. Both use the top at its
default parameters.

`tb_workload_matmul` has the prefetcher off. It sends one K-step of two thread blocks and
counts what memory returns against what was asked for. The shapes:
- Qwen-3 30B `fused_moe`: 128 x 256 BF16 tiles. The expert weight is 2048 x 1536 (public
  model sizes).
- Llama-3.1 70B FFN: 64 x 128 tiles. The weight is 8192 x 28672.

| weight stream | layout | read | amplification |
|---|---|---|---|
| Qwen MoE | column-major | 512 pages | 16x |
| Qwen MoE | tile-major 64 x 32 | 32 pages | 1x |
| Qwen MoE | tile-major 128 x 16 (bit swap) | 32 pages | 1x |
| Qwen MoE | tile-major 256 x 8 (bit swap) | 64 pages | 2x |
| Qwen MoE | tile-major 512 x 4 (bit swap) | 128 pages | 4x |
| Llama FFN | column-major | 256 pages | 32x |
| Llama FFN | tile-major 64 x 32 | 8 pages | 1x |
| Llama FFN | column-major, in HBM | 256 lines | 1x |

Column-major also costs time, not just bandwidth. Each tile column is a separate page, so
the 64 HBF MSHR entries fill up and the TMA stalls. Issuing the Qwen tiles takes 15 310
cycles instead of about 1 030.

`tb_workload_latency` is the latency sweep. It models one HBF channel at 2 GHz: one 4 KB
page every 160 cycles, which is 1/96 of 4.915 TB/s. Two thread blocks stream a full
Llama weight column, 128 K-steps, tile-major. Each block waits for its previous tile's
data before loading the next. One block retires half way through.

| NAND latency | degree (2 blocks -> 1) | cycles, no prefetch | cycles, prefetch | bus time of pages read + L |
|---|---|---|---|---|
| 1 us | 3 -> 6 | 327 707 | 127 593 | 126 800 |
| 2 us | 6 -> 12 | 593 913 | 133 033 | 130 720 |
| 5 us | 15 -> 31 | 1 351 673 | 149 353 | 142 480 |
| 10 us | 31 -> 62 | 2 641 913 | 302 601 | 162 720 |
| 20 us | 62 -> 125 | 5 201 865 | 651 744 | 202 560 |

Up to 5 µs the prefetcher keeps the bus busy: the run ends within 5% of the bus time.
At 10 and 20 µs, 64 HBF entries per channel can no longer hold the pages that must be in
flight, and the run falls 2-3x behind the bus. Raising `HBF_ENTRIES` is the remedy.
Near the end of a stream, the deepest prefetches read a few pages that are never demanded
(12 to 248 here). The K/TILE_K cap limits the degree, but not where the stream ends.

## Departures and choices

What follows the described scheme:
- the row/column split by the leading stride;
- the `i << log2 b` tile base;
- the two nested counters (a, b·K) / (b, v/b) and the `min(a, u)` treatment of wide tiles
  with the field swap;
- the 4 KB MSHR partition;
- whole-block insertion;
- the degree formula with its ×2 factor, its K/TILE_K cap and its adaptation to retiring
  blocks;
- the two-tier split of prefetches between the L2 and the SRAM buffer.

Choices made here where no detail was available:
- All handshakes and widths, and the one-load-at-a-time TMA.
- The error cases listed above.
- Stride-below-K dimensions other than dimension 0 are scaled by b in the counter
  programme. This is a generalisation of the two-counter rule to views that split the row
  direction.
- The MSHR's associativity, merge and stall policy, and entry counts. The HBM side tracks
  128 B lines; a 32 B sector request is tracked by its line.
- Only one prefetch trigger at a time. Triggers are de-duplicated per 4 KB page, and L2
  hits trigger as well as misses.
- The prefetcher learns of block retirement through an input pulse.
- The prefetcher's inputs (BL, p_tile, K/TILE_K, stride) are run-time configuration.
- Phase 1 takes a single cycle, as described under Timing.
- The L2 lookup is answered in the same cycle.

Not part of this RTL:
- the L2 arrays;
- the HBM and HBF devices;
- the SRAM buffer;
- the SMs;
- the TMA's data path into shared memory;
- the software side: a DSL layout extension and binary instrumentation for kernels that do
  not use the TMA.

## Simulating

Every testbench is self-checking and ends with a line `TB_RESULT checks=N failures=M`. Each
has a watchdog. Build any of them with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tilelens_top \
          -y rtl -y tb +libext+.sv -Irtl rtl/tilelens_pkg.sv tb/tb_tilelens_top.sv
./obj_dir/Vtb_tilelens_top
```

The testbenches and what each checks:

| testbench | checks |
|---|---|
| `tb_split_sum` | routing by stride against a reference sum, random ranks |
| `tb_tilebase_unit` | tile base for the 2-D/3-D/4-D views and random views, against the offset formula |
| `tb_counter_reconfig` | hand-worked programmes for each layout, every error case, and 2000 random descriptors against a reference |
| `tb_addr_counter_engine` | address sequences against a loop nest, under random back-pressure |
| `tb_tile_bit_swap` | the field swap, including the FP8 32 x 32 / 128 x 32 example |
| `tb_tilelens_tma` | every request of whole loads against a logical-position model: views, wide tile, BF16, errors, random shapes, back-pressure, cycle timing |
| `tb_hbf_prefetcher` | degree 5 for 132 CTAs at BL = 6000 and p_tile = 16; growth as CTAs retire; the cap; the stream; the two tiers |
| `tb_mixed_mshr` | against a reference table: page vs line merging, waiters, full-partition and port stalls, fills |
| `tb_l2_block_fill` | 32 ordered lines per HBF block, 1 per HBM line, back-pressure |
| `tb_tilelens_top` | end to end at the default parameters (see below) |
| `tb_workload_matmul` | read amplification per layout on the evaluated weight shapes |
| `tb_workload_latency` | the latency sweep with and without prefetching |

`tb_tilelens_top` runs the top with no parameter overrides. Around it, it models:
- an L2;
- an HBF with 300-cycle latency and one read accepted per 4 cycles;
- an HBM with 30-cycle latency.

Two thread blocks then stream a 1024 x 256 BF16 tile-major weight matrix. One block retires
half way, and the SRAM tier is switched on near the end. After that come four extra loads:
- a wide-tile load;
- a column-major HBM load;
- a rejected load;
- a repeated load.

The test checks every request address and that no page is read from flash twice. It also
checks that every mechanism happened at least once:
- tile-major loads;
- the bit swap;
- column-major mode;
- the error;
- L2 hits;
- merges;
- stalls;
- prefetches of both tiers;
- degree growth and the cap.
