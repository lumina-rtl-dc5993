# LuminCore: a radiance-cached rasterizer for 3D Gaussian Splatting

3D Gaussian Splatting (3DGS) draws an image by walking, for every pixel, a
depth-sorted list of 2D Gaussians and blending their colours front to back:

    alpha_i = opacity_i * exp(-e_i),   e_i = 1/2 * d^T * Conic_i * d,   d = pixel - centre_i
    C      += alpha_i * T * colour_i
    T      *= (1 - alpha_i)            stop once T < 1e-4

A Gaussian whose alpha is at most 1/255 changes nothing and is skipped. In
real scenes a pixel walks over a thousand list entries, but only about one in
ten passes that test. On a GPU, with one thread per pixel, this wastes most of
every warp. LuminCore is an accelerator for this "rasterization" step of a
mobile SoC and rests on two ideas.

1. **Split the cheap test from the expensive blend.** Four small processing
   elements (PEs) compute `e` for every list entry and keep only the
   *significant* ones. A shift-register queue passes these to a single
   *backend* that computes `exp`, the transmittance and the colour. One backend
   keeps up with four PEs because so few entries survive the test. This
   four-PE, one-backend unit is the Neural Rendering Unit (NRU).
2. **Radiance caching.** Two rays whose first few significant Gaussians are the
   same almost always end with the same colour. A pixel therefore integrates
   only until it has met its first K = 5 significant Gaussians. It uses their
   IDs as a key into a hardware cache, *LuminCache*. On a hit the cached
   colour is the pixel's colour and the rest of the list is skipped. On a miss
   the pixel is integrated to the end and its colour is written back under
   that key. The four PEs of an NRU that served now-finished pixels are
   *remapped*: they work together on the missed pixel, four list entries per
   cycle.

This SystemVerilog gives the whole accelerator core: PEs, queue, backend,
NRUs, LuminCache with its arbiter, the double-buffered feature and output
buffers, and a tile controller. It is built at its full size: 8 x 8 NRUs (256
PEs, one 16 x 16-pixel tile at a time), 4096-entry feature buffers and a
4-way, 1024-set cache. The GPU, DRAM, DMA engine, the MCU that sequences
tiles and the SoC bus lie outside the core. The GPU projects and sorts the
Gaussians and computes their view-dependent colour. The core's side of the
DMA and MCU appears as ports of `lumina_core`.

## 1. Data flow of one tile

```
DMA --fb_wr--> [feature buffer, idle bank]      (swap between tiles)
                [feature buffer, active bank] --256 read ports--> NRU[0..63]
NRU n:  4 x PE (3 stages) --sig?--> shift-register queue (13) --> backend
        backend: Expo -> alpha>tau? -> T'=T(1-alpha) -> T'>1e-4? -> RGB MAC, alpha-record
        alpha-record full --> lookup --> round-robin arbiter --> LuminCache (active bank)
        miss: finish the pixel (remapped PEs) --> update LuminCache
all NRUs done --> [output buffer, active bank, slot s]  (swap) --> DMA reads pixels
```

The host (MCU) writes a tile's sorted list into the idle feature bank and
swaps the banks. It then pulses `tile_start` with the tile's origin, the list
length, an output slot, `rc_en` and `tau`. Pixel `p = 4n + l` of the tile
(row-major, 16 wide) is rendered by lane `l` of NRU `n`. `tile_done` pulses
once all 256 colours are in the output buffer. Between tiles the host may swap
any of the three double buffers. The idle bank of each can be filled or read
one word per cycle while the core works on the other bank.

## 2. Number formats

The source gives no widths. The formats below were chosen so that a
bit-exact software model is easy to write. The model is
`tb/lumina_ref_pkg.sv`.

| quantity | format | note |
|---|---|---|
| pixel and Gaussian coordinates | Q11.4 signed, 16 bit | pixel centres at +0.5 (`+8`) |
| conic terms `conx, cony, conz` | Q5.12 signed, 18 bit | stored as `a/4, b, c/4` (see 3) |
| exponent `e` | Q6.10 unsigned, 16 bit, saturating | |
| threshold `thr` | Q6.10 | `ln(255 * opacity)`, from software |
| opacity | Q0.8 | |
| alpha | Q0.16 | `tau` default 257 = 1/255 |
| transmittance T | Q1.16, 17 bit | 65536 = 1.0; continue while T > 6 (1e-4) |
| colour accumulator | Q10.16, 26 bit per channel | output rounded, clamped to 8 bit |
| Gaussian ID | 32 bit | |

A feature record (`feature_t`) has 166 bits: ID, x, y, three conic terms,
opacity, threshold and RGB. Stored as 22 bytes, 4096 records fill one 88 KB
bank, which is half of the 176 KB feature buffer.

## 3. The PE: a significance test without an exponential

`lumina_pe` has three pipeline stages. Its structure follows the published
PE diagram:

1. `dx = px - gx`, `dy = py - gy`, then the products `dx*dx`, `dx*dy`, `dy*dy`
2. `m2 = dy*dy * conz + dx*dx * conx`
3. `m3 = (m2 << 1) + dx*dy * cony`, `e = m3 >> 10`, then a sign check and a compare

The diagram shows the shift but not its amount; one bit is used here. The
conic is stored as `(a/4, b, c/4)` for `Conic = [[a, b], [b, c]]`. With
the one-bit left shift this gives exactly `e = (a dx^2 + c dy^2)/2 + b dx dy`.
The diagram's comparator tests "alpha > 1/255". Because
`alpha = op * exp(-e)`, this is the same as `e < ln(255 * op)`. The
threshold is a per-Gaussian constant, so the PE compares `e` with the
`thr` field of the feature and needs no exponential. A Gaussian is
significant when `m3 >= 0` and `e < thr`. Significant Gaussians go into the
queue with their ID, list position, lane, opacity and colour.

The backend still applies the test `alpha > tau` to the alpha it computes.
The PE threshold only decides which entries reach the backend at all, so a
`thr` rounded too low drops a barely significant Gaussian. The reference model
uses the same rule.

## 4. The exponent unit and the backend

`lumina_expo` computes `exp(-e) = 2^-(e log2 e)`:
- multiply by `log2 e` in Q1.15;
- look up `2^-f` for the fractional part in a 17-entry table of `2^(-i/16)`,
  with linear interpolation;
- shift right by the integer part.

The error against `exp()` is at most 15 LSB of Q0.16, which is below
1/4000. The table values are `round(65536 * 2^(-i/16))`.

`lumina_backend` takes one queue entry per cycle in two stages:
- **stage 1**: pop the head and compute alpha;
- **stage 2**: update the pixel the entry belongs to. If alpha is at most
  `tau`, the entry is skipped. Otherwise `T' = T(1 - alpha)` is computed. If
  `T' <= 1e-4` the pixel is finished (`ev_term`) and this entry is not
  blended. Otherwise the colour MACs add `alpha * T * rgb`, T becomes `T'`,
  and the ID is appended to the pixel's alpha-record if it holds fewer than
  five.

When a pixel in its dense pass records its fifth ID with caching on, the
backend raises `ev_full`. It also gives the list position just after that
entry, so that a missed pixel knows where to resume. Events are
combinational so that the NRU can stop feeding a pixel in the same cycle.
The backend drops entries of a pixel the NRU has marked inactive: a pixel
that hit, terminated or is waiting for the cache.

The alpha-record holds 4 pixels x 5 IDs x 32 bits = 80 bytes, plus a 3-bit
count per pixel. The published size is 88 bytes.

## 5. The NRU: one pixel's life and the two issue modes

`lumina_nru` keeps a small state per pixel:

```
DENSE --ev_full (rc_en)--> LOOKUP --granted--> WAIT --hit--> DONE (cached colour)
  |                                             \--miss--> MISS --turn--> SPARSE --end/term--> UPDATE --granted--> DONE
  \--end of list / ev_term--> DONE (integrated colour)
```

**Dense mode.** While any pixel is DENSE, the NRU reads list entry `j` once
per cycle. All four PEs get the same Gaussian, each with its own pixel.
Results for pixels that have left DENSE are masked off.

**Sparse (remapped) mode.** When no pixel is DENSE and one or more pixels
missed, the NRU serves them one at a time. The four PEs read entries `k`,
`k+1`, `k+2`, `k+3` for the same pixel, starting where its dense pass
recorded the fifth ID. The queue takes up to four entries per cycle in PE
order, which keeps the list order that blending needs.

Two rules keep the colour exact:

- *Drain before remapping.* A sparse pass starts only when the PEs, the queue
  and the backend are empty. While a pixel waits for the cache, the dense
  pass keeps running for its neighbours, and some of its own entries beyond
  the fifth record may already be in flight. Those entries are dropped. The
  sparse pass reads them again from the recorded position. Without this rule
  such an entry could be blended twice. The fault test of the NRU removes
  this rule.
- *Credits.* The PEs issue only if the queue can take four more entries,
  counting entries still inside the three PE stages and the read stage.
  Otherwise they stall (`st_credit_stall`). The queue therefore never
  overflows and needs no back-pressure into the pipeline.

With `rc_en` low no pixel ever leaves DENSE for the cache. The NRU is then a
plain 3DGS rasterizer, bit-exact with the reference model.

Cache requests leave the NRU one at a time, through a registered request
that is held until granted. An update is sent before a lookup. A pixel that
never collects five significant Gaussians is integrated in full and not
cached.

## 6. LuminCache

Each entry is a key and a colour. The key is the concatenation of the first
five significant IDs. The five IDs are cut as follows:

| ID bits | use | total |
|---|---|---|
| `[1:0]` of each ID | set index, first ID in the top bits | 10 bits, 1024 sets |
| `[17:2]` of each ID | tag, first ID in the top bits | 80 bits = 10 bytes |
| `[31:18]` | not stored | |

Two keys that differ only in bits 18 and up therefore alias. The cache test
shows this on purpose.

| property | value |
|---|---|
| ways | 4 |
| entry | valid + 80-bit tag + 24-bit RGB |
| size per bank | 4096 x 104 bits = 52 KB |
| replacement | 3-bit tree pseudo-LRU per set |

Replacement rules:
- The victim is `{0, b1}` if `b0 = 0`, else `{1, b2}`.
- Touching way 0 or 1 sets `b0` and sets `b1` to "the other one". Ways 2 and
  3 work the same way with `b2`.
- Lookups that hit touch their way. Updates fill an invalid way first, else
  the victim.
- An update whose key is present rewrites that entry.

Lookups and updates arrive one per cycle from a round-robin arbiter over the
64 NRUs (`lumina_cache_arb`). The answer comes one cycle later and is routed
back to the NRU that was granted.

The cache is **double-buffered**. The NRUs use the active bank. The idle
bank has its own port for the DMA:
- `c_we`/`c_waddr`/`c_wdata` write `{valid, tag, rgb}` at `{set, way}`;
- `c_re`/`c_raddr` read it back one cycle later;
- `c_flush` invalidates the idle bank in one cycle;
- `c_swap` exchanges the banks between tiles.

4096 entries are one entry per pixel of a 64 x 64-pixel area, i.e. 4 x 4
tiles. The intended use follows from this:
1. Render a group of tiles with caching on.
2. Save the bank.
3. Swap in the next group's saved bank.
4. In the next frame, load each group's bank back before rendering it.

The source is not consistent about the group size. One place says the cache
is shared by 2 x 2 tiles and another says 4 x 4 tiles. The sizes here follow
the 4 x 4 statement. The hardware does not fix the grouping, because the
host chooses when to swap, flush, save and load.

## 7. Buffers and the controller

- **Feature buffer** (`lumina_feature_buf`). Two banks of 4096 features.
  The DMA writes the idle bank and every PE reads the active bank
  (registered, one cycle). In dense mode all 256 read ports read the same
  address. A real memory would use one broadcast read plus 64 per-NRU reads.
  This description uses an array with a port per PE.
- **Output buffer** (`lumina_output_buf`). Two banks, each with 4 slots of
  256 x 24-bit pixels, which is 3 KB per bank and 6 KB in all. A finished
  tile is written in one cycle into a slot of the active bank. The DMA reads
  one pixel per cycle from the idle bank.
- **Controller** (`lumina_core`). It goes IDLE -> START (one cycle, the NRUs
  clear their state) -> RUN until every NRU reports done. It then writes the
  output buffer and pulses `tile_done`. Assertions check that the feature
  and cache buffers are swapped only while no tile is running.
- **Statistics**. Counters that run while a tile is in flight:
  - cycles;
  - NRU-cycles of dense issue, sparse issue and credit stall;
  - hits and misses;
  - integrated Gaussians.

## 8. Sizes

| item | here | published |
|---|---|---|
| NRUs x PEs | 8 x 8 x 4, 3-stage PEs | same |
| clock | (not a parameter) | 1 GHz |
| feature buffer | 2 x 4096 x 22 B = 176 KB | 176 KB, double-buffered |
| output buffer | 2 x 4 x 256 x 3 B = 6 KB | 6 KB, double-buffered |
| shift registers per NRU | 13 x 95 bit = 154 B | 160 B |
| alpha-record per NRU | 4 x 5 x 32 bit + counts | 88 B |
| LuminCache | 2 banks x 4 x 1024 x (80 + 24) bit = 2 x 52 KB | 4 x 1024 entries, 52 KB, 5 IDs, bits 3..18, double-buffered |
| alpha-record length K | 5, fixed | 5 by default; 1..10 in a sensitivity study |

## 9. Verification

Each module has a self-checking testbench in `tb/`. The testbenches share
the reference functions in `tb/lumina_ref_pkg.sv`:
- the PE arithmetic;
- the exponent with the same table;
- sequential per-pixel 3DGS blending that also returns the first five IDs;
- a generator of random anisotropic Gaussians.

The generator computes each conic by inverting a random covariance in
floating point.

| testbench | what it checks |
|---|---|
| `tb_lumina_pe` | `e` and significance against the model for random pairs; latency of 3 cycles |
| `tb_lumina_expo` | 20 000 random `e`, opacity pairs against `op * exp(-e)`, within 0.05% of full scale plus 2 LSB |
| `tb_lumina_shift_fifo` | order, count and full/empty under random multi-lane pushes and pops, against a queue model |
| `tb_lumina_backend` | colour, records and events against the sequential model, caching on and off |
| `tb_lumina_nru` | 40 random pixel quads, each checked three ways: caching off must match the model exactly; a first frame with caching on must give exact or same-key colours; a second frame must hit for every pixel with a full record. Uses a behavioural cache with random grant delays. |
| `tb_lumin_cache` | index/tag split, ID aliasing above bit 17, PLRU victim order, rewrite of a present key, flush, background read/write, bank swap |
| `tb_lumina_cache_arb` | one-hot grants, response routing, bounded wait under random requests |
| `tb_lumina_feature_buf`, `tb_lumina_output_buf` | bank separation, swap, read latency |
| `tb_lumina_core` | the full core at its default size (see below) |
| `tb_lumina_frames` | four frames of a moving camera on the full core, with per-group cache save and reload (see below) |

`tb_lumina_core` runs the real core with no parameter overrides. It loads
160 random Gaussians around one tile through the DMA port. It leaves one
corner of the tile thin, so that some pixels get fewer than five significant
Gaussians. It then renders the tile five times:

1. Caching off. Every pixel must equal the model.
2. Caching on, with an empty cache.
3. The same tile again. At least 90% of the pixels with a full record must
   hit.
4. After a cache swap, using the empty bank. The result must be the same as
   in run 2.
5. After swapping back. The pixels must hit again.

The result is read out through the output buffer after an output swap. The
test fails if any mechanism never occurred:
- dense issue;
- remapped issue;
- credit stalls;
- hits and misses;
- early termination;
- the three kinds of buffer swap.

A typical run, with 160 Gaussians in the tile:

| run | cycles | hits | misses |
|---|---|---|---|
| caching off | 334 | | |
| caching on, empty cache | 523 | 32 | 218 |
| caching on, warm cache | 272 | 250 | 0 |

Any tile pays a dense pass up to each pixel's fifth significant Gaussian.
When a cache miss is likely, this design is slower than plain rendering,
because a missed pixel re-reads part of its list in sparse mode. The gain
comes from frames that hit.

`tb_lumina_frames` is a short video workload for the full core. Its scene
is random and stands in for real data:
- 220 Gaussians over a 64 x 32-pixel window, i.e. two groups of 2 x 2 tiles;
- four frames, with the camera drifting by a fraction of a pixel per frame;
- one depth order kept for all four frames, as when a sorting result is
  shared over several frames.

Each tile group keeps its own cache content. Before the group is rendered,
its saved content is loaded into the idle bank and swapped in. Afterwards the
content is swapped out and saved through the background port. Every pixel
must equal the reference of its own frame, or, on a hit, a colour produced
earlier under the same key. A typical run:

| frame | hit rate |
|---|---|
| 1 | 15% (only pixels sharing a key within the frame) |
| 2 to 4 | 94-96% |

Almost every hit differs from a full rendering. The average difference is
about 15 of 255 levels per channel. That is the quality cost of caching on
an untrained random scene. The model fine-tuning that reduces this cost in
practice runs in software and is not part of this design.

Each module's testbench was also run against a copy of the module with one
deliberate fault, and every one of them reported failures. The faults were:
- a sign flip in the PE;
- no interpolation in the exponent unit;
- reversed lane order in the queue;
- no termination in the backend;
- the drain rule removed in the NRU;
- an inverted PLRU victim in the cache;
- fixed priority in the arbiter;
- wrong-bank access in the two buffers;
- a transposed pixel map in the core.

To simulate with Verilator 5, for example the full core:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/lumina_pkg.sv tb/lumina_ref_pkg.sv tb/tb_lumina_core.sv \
    --top-module tb_lumina_core
obj_dir/Vtb_lumina_core
```

The full-size test takes about a minute to build and a few seconds to run.
Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog if the design hangs.

## 10. Where this design departs from or adds to the published one

- **Number formats, the exponent unit, the queue entry and the per-PE
  threshold field** are this design's own (sections 2 to 4).
- **Feature record width.** The published feature buffer size matches a
  22-byte record and 4096 Gaussians per bank. That record layout is an
  inference, not a published format.
- **Remapping stays within one NRU.** A missed pixel is served only by the
  PEs of its own NRU, and only after that NRU's dense pass has ended. Moving
  missed pixels between NRUs is not done.
- **Recording IDs.** A pixel records a Gaussian's ID only if the Gaussian is
  blended. A Gaussian that would drive T below 1e-4 ends the pixel and is
  not recorded.
- **The cache port.** It is single-ported, behind a round-robin arbiter,
  with a one-cycle lookup. The published design says only that the cache is
  shared by the NRUs.
- **K is fixed at 5.** The sensitivity study over alpha-record lengths 1 to
  10 needs a rebuild with another `K_REC`. The index and tag widths follow
  from `K_REC`. A cache geometry for other K is not given.
- **List length.** A tile's list must fit one feature bank (4096
  Gaussians). A tile cannot be continued from a second load.
- **Not part of this RTL:** everything that runs on the GPU or in software:
  - projection;
  - speculative sorting shared over a window of frames;
  - pose prediction;
  - colour evaluation from spherical harmonics;
  - cache-aware fine-tuning of the model.

  The SoC bus, DMA engine, DRAM and MCU are also not included. The
  significance threshold `thr = ln(255 * op)` is computed in software with
  the other features.
- **Memory macros.** All memories are plain arrays. A physical design would
  map the feature buffer, output buffer and cache to SRAM macros.

## 11. Changing it

- Array size: `NRU_X`, `NRU_Y` and `TILE_W` must satisfy
  `NRU_X * NRU_Y * 4 = TILE_W^2`.
- Buffer and cache sizes: `FB_DEPTH`, `OB_TILES`, `C_SETS` and `C_WAYS` are
  parameters of `lumina_core`. The cache index width must stay at
  `2 * K_REC` bits if `C_SETS` is changed.
- Formats and `K_REC` are in `rtl/lumina_pkg.sv`. If a format changes, the
  reference model must change with it.
- The NRU's scheduling is easiest to study in `tb_lumina_nru`, which runs a
  single NRU against a behavioural cache and simulates in seconds.
