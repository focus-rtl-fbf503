# Focus: a streaming concentration unit for video vision-language models

A video vision-language model turns every sampled frame into a grid of visual tokens.
A short clip easily yields several thousand tokens next to about a hundred text tokens,
and the language model then spends almost all of its work on the visual ones. Many of
them are useless. Some the question never attends to. Others nearly repeat a token next
to them, in the same frame or the frame before.

The Focus unit removes this redundancy inside the accelerator, while the data streams
past. It sits next to the PE array of a systolic-array accelerator and has two parts:

* **Semantic Concentrator (SEC), token level.** During an attention layer it watches the
  softmax scores from the text queries to the image keys. It ranks the image tokens by
  their strongest cross-modal attention and keeps the top *k*. Later layers only process
  the kept tokens. Each kept token carries a small *offset*: its distance to the previous
  kept token.
* **Similarity Concentrator (SIC), vector level.** Each output row of an FC layer is cut
  into 32-element vectors, one per PE-array column block. Each vector is compared with
  the vectors of its 2x2x2 spatio-temporal neighbourhood: two frames, two rows, two
  columns. A vector whose cosine similarity to a neighbour exceeds 0.9 is not stored.
  Its row records the neighbour's index in a *similarity map* instead. The next layer's
  GEMM multiplies only the distinct vectors. The SIC's *scatter* half then expands the
  results back to full rows through the map and accumulates them over the K dimension.

This repository holds synthesizable SystemVerilog for the Focus unit and a
self-checking testbench for every module. The host accelerator is not included: the
PE array, the softmax unit, the controller, the SRAM buffers and DRAM. Their traffic
crosses the unit's ports.

## Data flow

```
           softmax scores (text x image, per head)
                   |
   +---------------v----------------+       keep_pos / keep_off
   | SEC: importance_analyzer       |-----> (rows to load for P x V)
   |      -> topk_sorter            |
   |      -> keep bitmap scan       |---+ offsets, tile bases
   |      -> offset_encoder         |   |
   +--------------------------------+   v
                                   offset table / tile-base table
                                        |
   PE array partial sums (ps_*)         |
   similarity map of the input (map_wr_*)|
   +------------------------------+     |     +------------------------------+
   | similarity_scatter           |     |     | similarity_gather            |
   |  tmp buffer -> replicate by  |  requant  |  position = base + sum(offs) |
   |  map -> accumulate over K    |---> >>s ->|  conv_layouter (8 banks)     |--> map_* (one index per row)
   |  (output-stationary tile)    |  16 bit   |  similarity_matcher (8 cyc)  |--> cv_*  (distinct vectors)
   +------------------------------+           +------------------------------+
```

The SEC runs during attention layers and the SIC during FC layers. The two meet in
the offset table. The SEC writes one offset per kept token. The SIC reads the offsets
back to recover where each row of a tile sits in the original video.

## Semantic Concentrator

### Importance analyzer (`importance_analyzer`)
A token's importance is its largest text-to-image attention score, taken over all heads
and all text rows. A = 32 max units take 32 scores per beat. The running maxima sit in
the *importance buffer*, which holds 12800 scores of 16 bits (25 KB), packed as 400
words of 32 scores. The softmax unit can deliver scores in two orders:

* **spatial:** a beat is a slice of one attention row. Each beat does a
  read-modify-write of its buffer word in the same cycle.
* **temporal:** consecutive beats are successive rows of the same 32-column group. The
  maxima build up in lane registers and reach the buffer once, on the beat marked
  `in_last`.

Scores are compared as unsigned codes, since softmax outputs are never negative. A
`clear` pulse zeroes the buffer at one word per cycle (400 cycles) before a new layer.

### Top-k selection (`topk_sorter`)
The 32 max units are chained into a systolic priority queue. Each cell keeps the larger
of its own key and the key arriving from the left, and passes the smaller one on. One
pass streams all *M* scores through the chain, one per cycle. At the end of the pass the
cells hold the 32 largest keys in order.

A pass admits only keys below the smallest key the previous pass kept. So pass *i*
yields ranks 32(i-1)+1 to 32i, and *k* tokens take ceil(k/32) passes. One pass costs
M + 32 drain cycles + up to 32 emit cycles, about M·k/32 cycles in all. That is far
below the time of the attention GEMM it overlaps with.

The sort key is `{score, ~index}`. Equal scores therefore rank the lower token index
first, and every key is unique, which the threshold between passes relies on.

### Offsets (`offset_encoder`, `semantic_concentrator`)
The sorter emits winners in score order, but the offsets must follow position order. The
SEC therefore marks winners in a keep bitmap and then scans it once, one position per
cycle. The encoder is a gap counter: each kept token's offset is `pos - prev_pos`, and
`prev_pos` starts at -1. The counter never restarts at a tile boundary, so the first
offset of a tile already covers the tokens pruned at the end of the previous tile.

`focus_unit` stores every offset in an offset table. For every 1024th kept token it also
records the position of the kept token just before it. This is the *tile base* that the
gather needs to start a tile.

## Similarity Concentrator

### Rebuilding positions
A GEMM output tile has up to 1024 rows, one per kept token. The gather starts each tile
at the tile base and adds each row's offset to a running position. This recovers the
token's original frame *f*, row *r* and column *c* (by division by the frame size `H*W`
and width `W`). With dense layers (before the first pruning layer), set
`cfg_use_offsets = 0`. Every offset is then 1 and the base is `tile*1024 - 1`.

### Conflict-free layout (`conv_layouter`)
This is the part that makes block matching cheap. A token goes to

```
Bank   = f%2*4 + r%2*2 + c%2
Offset = floor(r/2)*ceil(W/2) + floor(c/2)      (mod 32)
```

The eight tokens of any 2x2x2 block differ in at least one parity of (f, r, c). So they
always sit in eight different banks, and one cycle reads the whole block without
copying data. Seen from the key at (f, r, c), neighbour *j* (j = 1..7; bit 2 = previous
frame, bit 1 = row above, bit 0 = column to the left) lives in bank `key_bank ^ j`. Its
offset is the formula applied to (r - bit1, c - bit0).

The incoming token is always the last token of its block in stream order. Its seven
neighbours have therefore already arrived, if they exist and were kept.

Each entry stores the vector, its squared norm, its map index and its absolute position.
The position serves as a tag. A neighbour counts only if its slot holds exactly the
expected position. This handles three cases:

* pruned tokens, which were never written;
* stale data from two frames back, which shares the bank and offset;
* slots overwritten by a later row.

The 8 banks x 32 entries hold 256 vectors (16 KB at 32 x 16 bits). A frame fits whole if
`ceil(H/2)*ceil(W/2) <= 32`, for example 8x8 or 10x12 tokens. Larger frames wrap around
modulo 32, which turns the banks into a sliding window. Early rows of the previous frame
are then overwritten before the next frame needs them, and those neighbours count as
absent. The result is fewer matches, never a wrong one. Common frame grids of 13x13 or
14x14 tokens need 49 slots per bank, so with the default depth they lose part of the
temporal reach. Raising `DEPTH` to 64 restores it.

### Matching (`similarity_matcher`)
A single dot-product unit (32 multipliers and an adder tree) is shared over eight
cycles per key:

* cycle 0 computes |p|²;
* cycles 1..7 compute p·q_j for the seven neighbours, whose norms come from the layouter.

The 0.9 cosine threshold is tested exactly, without square roots or a divider:

```
p.q > 0   and   (p.q)^2 * 100 > 81 * |p|^2 * |q|^2
```

When several neighbours pass, the most similar wins. The comparison is done on squares
by cross-multiplying: `(p.q_i)^2 |q_j|^2 > (p.q_j)^2 |q_i|^2`. If two are exactly
equal, the lower neighbour number wins.

Throughput is one row per 8 cycles. The GEMM that produced the row took K/32 = 112
cycles per row for K = 3584, so matching never limits the pipeline.

### Collection (`similarity_gather`)
The gather assigns *compact indices*. A row with no match takes the next index, which is
the count of distinct vectors so far in the tile, and its vector leaves on `cv_*`. A
matched row reuses the index of the neighbour it matched. Every row puts its index on
`map_*`. Only neighbours inside the current tile are compared: `tile_start` clears the
layouter, and any position at or before the tile base is masked.

### Scatter and K accumulation (`similarity_scatter`)
In the next FC layer the input arrives concentrated. For input column block *i* there
are *p_i* distinct vectors plus the map from the previous gather. The PE array
multiplies only those *p_i* vectors and streams one 32-wide partial-sum vector per
cycle into a temporary buffer (`ps_*`). Pulsing `sub_go` then replicates and
accumulates them:

```
for every tile row t:   acc[t] += tmp[map[t]]
```

The accumulation uses 64 adders (two rows per cycle, ceil(m/2) cycles per block) into
the output-stationary tile buffer. `sub_first` overwrites instead of adding. After the
block flagged `sub_last`, the finished tile streams out one row per cycle. It is
requantised to 16 bits (arithmetic shift right by `cfg_shift`, then saturation) and
goes straight into the gather, which applies back-pressure through `in_ready` while the
matcher is busy.

## Top-level interface (`focus_unit`)

| group | signals | use |
|---|---|---|
| score stream | `sc_clear`, `sc_ready`, `sc_valid`, `sc_temporal`, `sc_group`, `sc_scores[32]`, `sc_last` | softmax scores, spatial or temporal order |
| selection | `sel_start`, `cfg_m_len`, `cfg_k`, `sec_busy`, `sec_done` | pick k of M tokens |
| kept tokens | `keep_valid`, `keep_pos`, `keep_off` | kept positions in ascending order, with offsets |
| input map | `map_wr_en`, `map_wr_row`, `map_wr_idx` | similarity map of the current input block |
| partial sums | `ps_valid`, `ps_idx`, `ps_vec[32]` (32-bit) | PE-array results for the distinct input vectors |
| block control | `sub_go`, `sub_first`, `sub_last`, `cfg_tile_len`, `cfg_tile`, `cfg_shift`, `cfg_use_offsets`, `cfg_w`, `cfg_hw`, `sic_busy` | run one K block of one output tile |
| results | `map_valid`, `map_row`, `map_idx`, `cv_valid`, `cv_idx`, `cv_vec[32]` | output similarity map and distinct vectors |

A typical layer sequence runs like this:

1. `sc_clear`, then stream all heads' scores.
2. `sel_start`.
3. For each output tile and each K block: write the map, stream the partial sums, then
   pulse `sub_go`. Wait for `sic_busy` to drop before starting the next tile.

All control inputs are sampled at the rising clock edge. Reset is synchronous and
active low, and clears control state only. `cfg_*` must stay stable while the block
that uses them is busy.

Default parameters are A = 32, 12800 importance entries, 1024-row tiles and 8 x 32
layout entries. The shared constants live in `focus_pkg`.

### Timing summary (defaults)

| operation | cycles |
|---|---|
| importance buffer clear | 400 |
| score beat (either stream order) | 1 (32 scores) |
| top-k selection | ceil(k/32) x (M + ~66) |
| bitmap scan and offsets | M + 3 |
| scatter, per K block | ceil(m/2) (+ m to stream the tile out after the last block) |
| gather | 8 per row |

## Numbers and departures

* **Arithmetic.** The target design computes in FP16 with FP32 accumulation. This RTL
  uses 16-bit two's-complement elements and 32-bit partial sums, which keeps every
  decision exact and easy to check. The similarity test is the same decision as a
  floating-point cosine > 0.9 on those integers. Moving to FP16 means replacing the
  dot-product and accumulator arithmetic.
* **Requantisation** of the accumulated tile (shift and saturate) is this design's
  choice. The target design simply rounds FP32 to FP16.
* **Own choices.** The following are this design's own. Each module's header says
  which parts follow the original design.
  * the keep bitmap between sorter and encoder;
  * the exclusion threshold between sorter passes;
  * the position tags in the layouter and the sliding-window wrap;
  * the offset and tile-base tables;
  * the valid/ready and pulse protocols;
  * the two-rows-per-cycle reading of the 64 accumulators.
* **Layout window.** Frames larger than the window wrap around, as described above.
* **Positions and offsets** are 16 bits wide. That covers 12800 tokens and any gap
  between them.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against a
reference model written independently in the testbench. Each one checks cycle counts
where the design promises a rate, has a watchdog, and ends with a `TB_RESULT` line.

| testbench | what it checks |
|---|---|
| `tb_importance_analyzer` | both stream orders against a max-over-heads-and-rows reference; clear holds `in_ready` low one cycle per word |
| `tb_topk_sorter` | exact top-k with many ties; k not a multiple of the chain length, k = M, k = 0; cycle bound per pass |
| `tb_offset_encoder` | offsets of random keep masks with idle beats; offsets sum back to positions; restart at -1 |
| `tb_semantic_concentrator` | kept positions and offsets against a reference ranking, latency bound |
| `tb_conv_layouter` | bank/offset formula on worked examples in a 5x5 frame; neighbour presence and contents with pruned tokens; forwarding; eight distinct banks; sliding-window wrap with 14x14 frames |
| `tb_similarity_matcher` | match decision and best choice against a floating-point cosine reference; result in the 8th cycle |
| `tb_similarity_gather` | maps and distinct vectors of two tiles of a pruned 3-frame video; 8 cycles per row |
| `tb_similarity_scatter` | replication and K accumulation against a reference, ceil(m/2) cycles per block, back-pressure |
| `tb_focus_unit` | end to end at reduced size (A = 8, 16-row tiles) |
| `tb_focus_unit_full` | one complete operation at the default parameters |
| `tb_focus_unit_video` | default parameters on 4 frames of 14x14 tokens with 40 % kept: sliding-window layouter against a windowed reference, in-frame and cross-frame matches; then one 27x27 image frame |

`tb_focus_unit` chains both concentrators end to end. It covers an attention layer with
both stream orders and a multi-pass top-k, then two FC tiles on the kept tokens with
two K blocks each, then a dense tile. It counts each mechanism and fails if one never
occurs:

* spatial and temporal streams;
* multiple sorter passes;
* the offset carry into a second tile;
* scatter replication and K accumulation;
* matches and new vectors;
* tile-boundary exclusion;
* back-pressure from gather to scatter;
* dense mode.

`tb_focus_unit_full` runs the same flow with no parameter overrides: 96 image tokens,
40 kept in two passes, one offset tile and a 64-row dense tile.

`tb_focus_unit_video` also runs at the default parameters, on a video-shaped layer:
4 frames of 14x14 tokens (784 image tokens), with the first pruning layer keeping 40 %
(313 tokens, 10 sorter passes). About half of the kept tokens reuse a block neighbour's
input vector, which stands in for video redundancy. A 14x14 frame overflows the 32-deep
banks, so the reference model tracks which neighbours the sliding window has already
overwritten. The test requires matches both within a frame and across frames. The same
testbench then runs an image-shaped layer: one frame of 27x27 tokens, 291 kept. Here only
spatial neighbours exist, so the test requires cross-frame matches and window evictions
to be absent. A neighbour one row back is still inside the window.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/focus_pkg.sv rtl/*.sv tb/tb_focus_unit.sv \
          --top-module tb_focus_unit -o sim && ./obj_dir/sim
```

Replace `tb_focus_unit` with any testbench name.

## Not included

The host accelerator around the unit is not included:

* the 32x32 PE array;
* the softmax/normalisation unit;
* the accumulation unit below the array;
* the controller that sequences layers and picks *k* per layer (for example 40 % of
  image tokens at layer 3, falling to 10 % by layer 26);
* the 128 KB input and 78 KB weight SRAMs;
* DRAM.

The unit exposes the signals each of them would drive or consume.
