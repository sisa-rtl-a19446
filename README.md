# A scale-in systolic array for BF16 GEMM

A large square systolic array is efficient only when a GEMM fills it. In
language-model inference the M dimension (tokens in flight) is often small:
16, 33 or 100 rows on a 128-row array leave most processing elements idle
while still paying for their power and for the cycles that a wavefront takes
to cross the array.

This design cuts a 128 x 128 output-stationary array of BF16 multiply-add
elements into eight horizontal **slabs** of 16 x 128. Every slab has its own
activation and weight buffers, so each slab can work on a different 16-row,
128-column output tile. A slab can also take its weights from the slab above,
through a **bypass multiplexer** at its top edge. Then 2, 4 or all 8 slabs act
as one taller array. Slabs with no work are **power gated**. The same silicon
thus serves small M as eight independent 16-row arrays, medium M as fused
groups, and large M as one 128-row array.

The RTL is complete from the processing element to a top level that runs a
whole GEMM from an on-chip global buffer into an on-chip output buffer. The
host side, meaning off-chip memory, DMA into the global buffer and write-back
of results, is not part of it. Those functions are exposed as ports.

## Block structure

```
                    host: fill A/B, start(M,N,K), read results
                               |
   +---------------------------+-----------------------------------+
   | sisa_top                                                      |
   |  global_buffer (8 act banks x 16384 x 16 BF16,                |
   |                 8 wgt banks x  2048 x 128 BF16 = 8 MB)        |
   |        | per-bank read, per-slab bank select (broadcast)      |
   |        v                                                      |
   |  sisa_scheduler --> load engine --> slab local buffers        |
   |                 --> compute engine (start/clear/drain)        |
   |        |                                                      |
   |  slab 0 [act LB | wgt LB | 16x128 PEs] -- bottom-row weights  |
   |  slab 1 [act LB | wgt LB | 16x128 PEs] <- bypass mux          |
   |   ...                                                         |
   |  slab 7                                                       |
   |        | each slab drains into its own bank                   |
   |  output_buffer (8 banks x 512 rows x 128 fp32 = 2 MB)         |
   +---------------------------------------------------------------+
```

| File | Block |
|---|---|
| `rtl/sisa_pkg.sv` | Types (`bf16_t`, `fp32_t`, `slab_cfg_e`) and array dimensions |
| `rtl/bf16_mul.sv`, `rtl/fp32_add.sv` | Combinational arithmetic used by the PE |
| `rtl/sisa_pe.sv` | Output-stationary multiply-accumulate element |
| `rtl/slab_local_buffer.sv` | Double-buffered, lane-skewed edge buffer (activations or weights) |
| `rtl/sisa_slab.sv` | 16 x 128 PE grid with its two local buffers and the bypass multiplexer |
| `rtl/global_buffer.sv` | Banked activation and weight store with broadcast reads |
| `rtl/output_buffer.sv` | One result bank per slab, with a host read port |
| `rtl/sisa_scheduler.sv` | Tiling, slab configuration, load/compute overlap, descriptors |
| `rtl/sisa_top.sv` | Top level |

## The processing element and the wavefront

Each PE holds one element of C. An activation enters from the left and a
weight from the top. Each passes through one register on its way on, so the
operands advance one PE per cycle. When both operands carry a valid flag, the
PE adds their product to its accumulator. Partial sums stay in place during
computation.

The arithmetic is as follows:

* The BF16 x BF16 product is exact in binary32, since two 8-bit significands
  give 16 bits.
* It is added to a binary32 accumulator with round-to-nearest-even.
* Subnormal inputs and results are flushed to zero.
* Infinities and NaNs propagate as IEEE-754 specifies. Any NaN becomes the
  quiet NaN `0x7fc00000`.

The accumulator width and the subnormal rule are this design's choices. The
paper gives BF16 operands only.

The edge buffers skew their lanes. Lane *l* of a stream starts *l* cycles
after lane 0. Activation *k* of row *r* and weight *k* of column *c* therefore
meet in PE (*r*, *c*). For a slab group of height *G*·16 and a K tile of
`klen` elements, the last multiply-add happens `klen + 128 + G*16 - 1` cycles
after start. That is the usual fill, stream and drain of a systolic array.
Fusing slabs only lengthens the fill by 16 cycles per added slab.

## Fusion: how a lower slab joins the one above

When `bypass` is set on a slab:

* Its top PE row reads the weights leaving the bottom row of the slab above.
* It stops reading its own weight buffer, which is disabled.
* Its activation stream is delayed by `position * 16` cycles, where position
  is its index within the group.

The delay is what makes the fused group behave like one array. A weight needs
16 cycles to cross each slab above. Without the delay, the lower slab's
activations would arrive ahead of the weights they must meet. With it, row
*r* of slab *p* of the group sees exactly the timing of row `16p + r` of a
monolithic array.

The group is the top slab plus the `G - 1` slabs below it, and groups are
aligned to multiples of G. The per-slab bypass bits and delays are the whole
of the reconfiguration: no data path changes except the one multiplexer per
column at each slab boundary.

## Draining results

At the end of an output tile, `drain` is raised for 16 cycles. Every
accumulator then shifts one row down per cycle, and zeros enter at the top.
The bottom row of the slab goes straight into that slab's output-buffer bank:
row 15 first, then row 14, and so on. After the drain the slab is clear.

Each slab drains into its own bank, so all slabs drain in the same 16 cycles,
fused or not. A fused group of G slabs needs 16 drain cycles, not G·16.

Draining by shifting is a choice of this design. The paper says that each
slab writes to its own output bank, but not how the values leave the PEs.

## Tiling: what the scheduler does with M, N and K

For `C[M,N] = A[M,K] x B[K,N]` the scheduler works through M in row blocks
of 16, with these rules:

* **Group size.** While rows remain, it picks G, the smallest power of two
  whose G·16 rows cover the remaining rows, capped at 8.
  * M ≤ 16 runs with G = 1: eight independent slabs.
  * M = 33 runs with G = 4: two 64-row groups, each on its own N tile.
  * M = 150 runs with G = 8 for rows 0..127 (monolithic), then G = 2 for the
    22-row residual.
* **N tiles.** The 8/G groups take consecutive 128-column N tiles, one per
  group, so one iteration covers `8/G` N tiles. The next iteration takes the
  next ones.
* **Power gating.** A group with no N tile left is switched off. So is a slab
  below the last row block of its group, as with the fourth slab of each
  group of 4 when M = 33 (three row blocks).
* **K tiles.** K is cut into tiles of at most 128, the depth of one
  local-buffer half. The K tiles of one output tile run back to back and
  accumulate in the PEs. Only the last one is followed by a drain.

Work is a sequence of steps of the form (M tile, iteration, K tile). Two
engines overlap on those steps:

* The **load engine** copies the next step's K tile from the global buffer
  into the half of each local buffer that compute is not reading, one K slice
  per cycle.
* The **compute engine** streams the current half.

A step whose power and bypass masks differ from the running step waits for
the array to drain: a gated slab's buffer cannot be filled, and the bypass
must not change under a running wavefront. `load_overlap` shows when a load
runs under compute. `cfg` shows the current regime (independent, fused,
monolithic).

### Global buffer layout

The host writes A and B into the global buffer with this layout:

* Row block `rb` of A (16 BF16 per word, one word per k) goes in activation
  bank `rb % 8` at word `(rb / 8) * K + k`.
* N tile `j` of B (128 BF16 per word) goes in weight bank `j % 8` at word
  `(j / 8) * K + k`.

With this layout the slabs of one step never need two different words of the
same bank. A slab reads any bank through a per-slab select that is registered
together with the read. Slabs that need the same tile share one read, so a
weight tile is broadcast to all eight slabs when they take the same N tile.

### Results and descriptors

Each slab's output bank is a ring of 512 rows. When slab *s* finishes an
output tile, it raises `wb_valid[s]` for one cycle with three fields:

* `wb_addr[s]`: the bank word of the tile's first row.
* `wb_row0[s]`: the C row of that word.
* `wb_col0[s]`: the C column of the tile's first column.

Word `wb_addr + r` then holds row `wb_row0 + r`, columns `wb_col0 ..
wb_col0 + 127`. The host reads through `ob_rd_*`, with one cycle of latency.
`done` pulses after the last drain. The host pads A with zero rows up to a
multiple of 16, so rows of a residual tile beyond M read as zero.

## Sizes

| Parameter | Default | Origin |
|---|---|---|
| Array | 128 x 128 PEs | paper |
| Slabs x height | 8 x 16 rows | paper |
| Activation local buffer | 16 lanes x 2 halves x 128 x BF16 = 8 KB | size from the paper, split assumed |
| Weight local buffer | 128 lanes x 2 halves x 128 x BF16 = 64 KB | size from the paper, split assumed |
| Global buffer | 8 + 8 banks, 4 MB activations + 4 MB weights | 8 MB total from the paper, split assumed |
| Output buffer | 8 banks x 512 x 128 x fp32 = 2 MB | 2 MB from the paper, banking per slab assumed |
| `DW` (M, N, K width) | 20 bits | assumed |

A GEMM fits in one run if both of these hold:

* Each activation bank can hold its row blocks: `ceil(M/16/8) * K <= 16384`.
* Each weight bank can hold its N tiles: `ceil(N/128/8) * K <= 2048`.

For larger operands the host splits the GEMM and adds the partial results.
Of the linear layers of the evaluated models (Qwen2.5 0.5B, 1.5B and 7B,
and Llama 3.2 3B, with 1 to 150 tokens), the smaller projections fit in one
run. For example, Qwen2.5-0.5B with N = 896 or 128 and K = 896 needs
896 of the 2048 words in each weight bank, one N tile per bank. Layers with K above 2048, or with
more than 16 N tiles at K = 896, need several runs. The weight side of the
global buffer, 4 MB, holds 2M BF16 values, and most such weight matrices are
larger than that whatever the layout.

## Power gating

`slab_pwr_on[s]` is the enable for the supply switch of slab *s*. The switch
itself is analog and not modelled. When a slab is off, its logic behaves as a
powered-down block does after its outputs are isolated:

* every PE register and local-buffer stream register is held at zero;
* all outputs read as zero;
* the slab's local buffers accept no writes.

A slab is powered again before its first load of a step that uses it.

## Departures from the paper and assumptions

* **Accumulator.** The accumulator is binary32 with round-to-nearest-even,
  and subnormals are flushed. The paper names BF16 only.
* **Drain.** Results leave by a 16-cycle shift into the slab's bank. The paper
  does not say how results leave the PEs.
* **Scheduling.** Tiling is done by a hardware scheduler from M, N and K. The
  paper describes the mapping (independent, fused, monolithic, residual,
  gated) but not who computes it.
* **Group sizes.** Groups are powers of two aligned to their size, following
  the paper's 33-row example of two 64-row groups. Groups of 3, 5, 6 or 7
  slabs are not used.
* **Memory layout.** The bank layout, the broadcast select, the ring pointers
  and the descriptors are this design's own.
* **Global-buffer connectivity.** The paper dedicates each global-buffer bank
  to a fixed set of slab buffers. Here every slab has a registered bank
  select over all eight banks of its kind. This lets one bank broadcast to
  any group of slabs, whatever the fusion pattern.
* **Activation reuse.** The paper keeps A resident while B tiles stream past
  it. Here A stays resident in the global buffer, but it is copied into each
  slab's activation buffer again for every step. Reuse comes from a single
  bank read feeding several slabs.
* **Host splitting.** Splitting a GEMM whose operands exceed the global
  buffer is left to the host. Partial sums over K passes are then added
  outside the array.
* **Off-chip side.** Off-chip memory, DMA and the host are outside the design.
  The global buffer has a host write port, and the output buffer a host read
  port.
* **Power gating.** Gating is logical only, as described above. The paper's
  power numbers come from its own models, which this RTL does not reproduce.
* **Sizing.** Local-buffer depth (128 per half) follows from the paper's
  8 KB and 64 KB per-slab sizes.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
values computed independently in `tb/sisa_ref_pkg.sv`, which uses
double-precision arithmetic rounded to binary32 with the same rules.

| Testbench | What it covers |
|---|---|
| `tb_sisa_pe` | Random products and sums, both wide and narrow exponent ranges; special values; clear, drain and gating |
| `tb_slab_local_buffer` | Lane skew, start delay, double buffering with writes during streaming |
| `tb_sisa_slab` | Two chained slabs: independent runs, K-tile accumulation, fused runs, gated slab, exact last-MAC cycle |
| `tb_global_buffer` | Random fills and reads with random bank selects, including broadcast |
| `tb_output_buffer` | Simultaneous bank writes with host reads |
| `tb_sisa_scheduler` | Seven GEMM shapes against an independent model of the tiling rules |
| `tb_sisa_top` | End-to-end GEMMs on a 4-slab, 4 x 8-PE instance, checked element by element |
| `tb_sisa_top_wl` | The evaluated token counts M = 1 .. 150 on 8 slabs of 16 x 16 PEs with K tiles of 128 (N = 48, K = 253), checked element by element |

`tb_sisa_top` and `tb_sisa_top_wl` count each mechanism and fail if any of them never happens:

* independent slabs
* fused groups
* monolithic operation
* a residual tile
* K tiling
* power gating
* load/compute overlap
* broadcast reads
* reconfiguration between tiles

Both also check the cycle count of a single-tile GEMM against the formula
above. `tb_sisa_top_wl` also checks that M = 33 runs as two 64-row groups,
each with one slab gated.

The largest instance simulated is that of `tb_sisa_top_wl`: 8 slabs of
16 x 16 PEs, K tiles of 128. Only the column count is below the default.
Its run shows the step behaviour that motivates the design. With N = 48 and
K = 253 the GEMM takes:

| M | Cycles |
|---|---|
| 1 | 467 |
| 16 | 467 |
| 33 | 1124 |
| 64 | 1124 |
| 100 | 1809 |
| 128 | 1809 |
| 150 | 2306 |

A GEMM costs the same for every M that selects the same group size. The
cost rises only when a larger group is needed.

At the default size every one of the 16384 PEs carries its own floating-point adder and multiplier. At that size the
Verilator model is too large to compile and run in minutes, so the full-size top has been
checked by lint and elaboration only. All sizes are parameters, and nothing
in the RTL depends on the reduced values.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sisa_pkg.sv tb/sisa_ref_pkg.sv tb/tb_sisa_top.sv \
    --top-module tb_sisa_top -o sim
./obj_dir/sim
```

The testbenches `include` nothing. Verilator finds the other modules in
`rtl/` through `-Irtl`. Each testbench ends by printing
`TB_RESULT checks=<n> failures=<n>`.
