# Mixed-TD: a dataflow CNN accelerator with per-layer tensor decomposition

A dataflow accelerator gives every layer of a network its own hardware
engine. All engines are chained into one pipeline and work at the same time
on successive pixels. This is fast at batch size 1, but every weight has to
live in on-chip memory. Mixed-TD shrinks the weights by storing each
convolution kernel in decomposed form. Each layer uses whichever of two
decompositions suits it best:

* **SVD**. The `c_out x (c·k·k)` kernel matrix becomes `U · V`, with rank `R`.
* **CPD** (canonical polyadic). The kernel becomes a sum of `R` rank-one
  tensors:
  `W[o][c][kh][kw] = Σ_r a1[o][r]·a2[c][r]·a3[kh][r]·a4[kw][r]`.

Each layer can also split its channels into groups before decomposing. It
cuts the kernel into `g1` output slices and `g2` input slices, and each of
the `g1·g2` chunks is decomposed and given its own engine.

The engine never rebuilds the full kernel. It computes the convolution as a
chain of small contractions, one per factor. This RTL provides:

* the two engine types;
* the grouped layer that holds `g1·g2` engines;
* the FIFO array that reorders channels between layers with different
  grouping;
* a two-layer pipeline (`mixed_td_top`) with AXI-Stream input and output.

## Number format

Activations and weights are 8-bit signed words. The published design uses
8-bit block floating point. Here the shared block exponent is not modelled:

* every word is a plain int8 mantissa;
* products are summed in 32-bit accumulators;
* each contraction stage ends in a fixed arithmetic right shift (`SHIFT_*`
  parameters) followed by saturation to [-128, 127].

The shift amounts are design parameters. In a real BFP flow they would
follow from the block exponents.

## The contraction stage (`td_stage`)

Both engines are chains of one building block. A stage has four parts:

1. an intermediate buffer (`vector_buffer`), which is ping-pong so the next
   vector can arrive while the current one is being used;
2. a weight memory (`weight_mem`), preloaded before inference;
3. `P_OUT` MAC units (`mac_unit`), each `P_IN` multipliers feeding an
   adder tree;
4. `P_OUT` accumulators (`accum_unit`), each a register with a
   "start at 0" mux.

For every output pixel a stage produces `L_OUT` values. Each value is a dot
product of length `NI`. The stage takes `P_OUT` outputs at a time, and for
each such group it steps through the inputs `P_IN` at a time. One vector
therefore takes `II = (L_OUT/P_OUT)·(NI/P_IN)` cycles. The unroll factors
`p_in` and `p_out` trade multipliers for throughput.

The stage's `MODE` sets which inputs each MAC unit sees:

| mode | MAC input | used for |
|---|---|---|
| `MODE_INNER` | all units get the same `P_IN` inputs (broadcast), each with its own weight row | SVD `V` and `U`, CPD `a1` |
| `MODE_BLOCK` | the same as INNER, applied separately to each of the `K·K` window positions | CPD `a2` |
| `MODE_DIAG` | unit `o` gets its own inputs `x[i·L_OUT+o]` (scatter): a per-rank product | CPD `a3`, `a4` |

The output beat of one stage is the input beat of the next, so
`p_out(k) = p_in(k+1)`.

## SVD engine

```
pixels -> sliding_window -> V stage (INNER, NI = C·K·K, L_OUT = R)
                         -> U stage (INNER, NI = R,     L_OUT = C_OUT) -> pixels
```

The input buffer (`sliding_window`) keeps a ring of `K+S` image rows. For
each output pixel it emits `K·K·P_IN_V` words per beat, ordered
(channel block, kh, kw, channel). Border windows are zero-padded, and
stride and padding are parameters. Each window beat is written into the V stage's buffer. The V stage then
steps through the `C·K·K` window words `P_IN_V` at a time for each group of
`P_OUT_V` ranks. At the defaults this takes `(16/8)·(576/8) = 144` cycles
per output pixel.

Weight layouts (`ld_sel`):

* `ld_sel = 0` loads `V[r][c][kh][kw]` at `r·C·K·K + ((c/P_IN_V)·K·K + kh·K + kw)·P_IN_V + c%P_IN_V`.
* `ld_sel = 1` loads `U[o][r]` at `o·R + r`.

## CPD engine

```
pixels -> sliding_window -> a2 (BLOCK)  t[kh][kw][r] = Σ_c  a2[c][r]·x[kh][kw][c]
                         -> a3 (DIAG)   u[kw][r]     = Σ_kh a3[kh][r]·t[kh][kw][r]
                         -> a4 (DIAG)   v[r]         = Σ_kw a4[kw][r]·u[kw][r]
                         -> a1 (INNER)  y[o]         = Σ_r  a1[o][r]·v[r]
```

* **Stage order.** The four stages run in the order a2, a3, a4, a1, as the
  engine diagram has them.
* **Where a2 runs.** The only sliding-window buffer sits before a2, so a2
  is applied to every window position. That costs `K·K` times the
  multiplications of applying it once per input pixel, but it keeps one
  input buffer per engine.
* **Broadcast and scatter.** a3 and a4 scatter their data: each MAC unit
  handles its own ranks. a2 and a1 broadcast.
* **Constraints.** `P_OUT_2` and `P_OUT_3` must divide `K`.

Weight layouts (`ld_sel`):

* `0` loads `a1[o][r]` at `o·R+r`.
* `1` loads `a2` (as `[r][c]`) at `r·C+c`.
* `2` loads `a3[kh][r]` at `kh·R+r`.
* `3` loads `a4[kw][r]` at `kw·R+r`.

Cycles per output pixel, per stage:

| stage | cycles |
|---|---|
| a2 | `(K·K·R/P_OUT_2)·(C/P_IN_2)` |
| a3 | `(K·R/P_OUT_3)·(K/P_OUT_2)` |
| a4 | `(R/P_OUT_4)·(K/P_OUT_3)` |
| a1 | `(C_OUT/P_OUT_1)·(R/P_OUT_4)` |

## Channel grouping (`grouped_layer`)

The stream between layers carries one 8-bit word per cycle. Pixels come in
raster order with their channels innermost. With grouping, a pixel's `C`
channels are interleaved as `(C/g2) × g2`, with the group index innermost,
so word `n` belongs to input group `n % g2`. A layer works in four steps:

* **Split.** One packer per input group collects an engine-input beat. The
  packer hands that beat to all `g1` engines of its group in the same
  cycle.
* **Engines.** Engine `e = h·g2 + g` computes output slice `h` from input
  slice `g`.
* **Reduce.** The `g2` engines of one output slice each produce a partial
  result over their input slice. These results are added with saturation
  once all of them are valid. How partial results are combined is this
  design's choice.
* **Merge.** One unpacker per output slice. The output stream takes a word
  from each slice in turn, giving `(C_OUT/g1) × g1`.

## Rearranging groups between layers (`channel_rearrange`)

If a layer's output grouping `g1` differs from the next layer's input
grouping `g2`, the word order must change. This is done by
`L = lcm(g1, g2)` FIFOs (`sync_fifo`), each holding one `C/L`-channel slice:

* the writer walks through the slices in `g1` order;
* the reader walks through them round-robin in `g2` order;
* each FIFO is two pixels deep.

## The pipeline (`mixed_td_top`)

```
s_axis -> layer 1: SVD, g1=2, g2=1 (2 engines, R=16)
       -> ReLU
       -> channel_rearrange (2 -> 4 groups, 4 FIFOs)
       -> layer 2: CPD, g1=1, g2=4 (4 engines, R=16)
       -> ReLU -> m_axis
```

The default shape is a 56×56×64 3×3 layer pair, as in ResNet-18's conv2_x
stage.

**Streams.** `s_axis_*` and `m_axis_*` are AXI-Stream ports, one word per
beat. `tlast` marks the last word of each frame. `frames_in` and
`frames_out` count frames on each side.

**Weight loading.** Before streaming, every weight is written through
`ld_we`, `ld_layer`, `ld_eng`, `ld_sel`, `ld_addr` and `ld_data`.

**Reset.** Reset is synchronous and active low everywhere.

**Throughput.** At the defaults the slowest stage is layer 1's V stage,
at 144 cycles per pixel. That is about 452k cycles per 56×56 frame, or
about 440 frames/s at 200 MHz for this layer pair. Next come the CPD a2
stage at `(9·16/3)·(16/8) = 96` cycles per pixel and the one-word stream
at 64 cycles per pixel. Raising `P_IN_V` shortens the V stage at the cost
of multipliers.

**Weight storage.** The pipeline holds 24,960 weight words:

* layer 1: `2·(16·576 + 32·16)` words;
* layer 2: `4·(64·16 + 16·16 + 2·3·16)` words.

## Where this departs from the published design

* **Missing engines.** Only convolution (SVD and CPD) and ReLU engines are
  built. The pooling, elementwise-addition (residual) and fully connected
  engines are only named in the published design and are not built, so
  neither ResNet-18 nor RepVGG-A0 can run end to end.
* **Layer settings.** The per-layer ranks, groups and unroll factors found
  by the published design-space search are not listed there. The values
  here are examples.
* **Number format.** Block floating point is reduced to int8 mantissas with
  fixed per-stage shifts. Rounding is truncation.
* **Combining input groups.** How the results of different input groups are
  combined is not described. Here they are added after each engine's
  requantisation.
* **a2 placement.** The CPD a2 stage runs per window position, as explained
  above.
* **Scatter stages.** The published design says the a3 and a4 stages
  scatter data to the MAC units "to compute the outer products". Here each
  MAC unit of those stages takes one rank's values and sums them along one
  kernel axis. This is how the sums of the CPD formula are grouped in this
  design; the published text gives no finer detail.
* **Not modelled.** Memory banking (BRAM mapping), the DDR/DMA side and the
  host are not modelled. Weights are loaded through a plain write port.
* **Word order.** The order of words inside buffers, the handshakes and the
  FIFO depths are this design's own choices.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench ends by
printing `TB_RESULT checks=N failures=M`, and each has a watchdog.
References are computed in the testbench from the undecomposed
definitions. `tb/mtd_ref_pkg.sv` holds the direct SVD and CPD convolutions
with the same shifts.

* `tb_mac_unit`, `tb_accum_unit`, `tb_weight_mem`, `tb_sync_fifo`,
  `tb_relu_unit`, `tb_vector_buffer`: random vectors against direct
  computation.
* `tb_sliding_window`: windows, padding and stride against direct
  indexing, with stalls on both sides.
* `tb_td_stage`: all three modes, and the initiation interval for INNER and
  BLOCK.
* `tb_svd_engine` and `tb_cpd_engine`: small layers against the reference
  convolutions.
* `tb_grouped_layer`: SVD with g1=g2=2 and CPD with g2=2.
* `tb_channel_rearrange`: 2→3 and 4→2 groups.
* `tb_mixed_td_top`: three 4×4×32 frames through the whole pipeline with
  random input gaps and output back-pressure. Every word and `tlast` is
  checked. It also counts that each mechanism acted at least once: both
  engine types, padded windows, broadcast to several engines,
  input-group sums, FIFO regrouping, ReLU zeroing, and stalls on both
  sides.
* `tb_mixed_td_top_full`: one 56×56×64 frame through the top at its
  default parameters, with no gaps. It checks 401,409 values and takes
  470,614 cycles from the first input word to the last output word,
  which is the 144-cycle-per-pixel V stage plus pipeline fill.

To run one testbench with Verilator (the harness files are only needed by
the testbenches that use them):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/mtd_pkg.sv tb/mtd_ref_pkg.sv tb/top_driver.sv \
  rtl/mixed_td_top.sv tb/tb_mixed_td_top.sv --top-module tb_mixed_td_top
./obj_dir/Vtb_mixed_td_top
```

The harnesses are:

| testbench | harness |
|---|---|
| `tb_sliding_window` | `tb/sw_harness.sv` |
| `tb_td_stage` | `tb/ts_harness.sv` |
| `tb_svd_engine`, `tb_cpd_engine` | `tb/eng_harness.sv` |
| `tb_grouped_layer` | `tb/gl_harness.sv` |
| both top testbenches | `tb/top_driver.sv` |
