# CEAZ compression engine in SystemVerilog

Scientific simulations write far more floating-point data than networks and
file systems can take. This engine compresses that data on the fly, at one
wide bus beat per clock, with a guaranteed bound on the error of every value.
It combines two ideas:

* **Dual quantization.** Every value is first turned into an integer on a grid
  of step 2·eb (eb is the error bound). Only then is it predicted from its
  neighbour. Because the prediction uses values that are already quantized,
  no lane waits for another lane's result. N lanes (32 for single precision)
  therefore run side by side with no feedback loop.
* **Huffman coding with a codebook that adapts slowly.** Building a Huffman
  code is serial and slow. The engine never waits for it. It starts with a
  prepared *offline* codebook and measures each chunk's symbol statistics.
  From one 32 MB chunk to the next it decides whether to keep the codebook,
  build a new one in the background, or fall back to the offline one.

A feedback path can also steer the error bound so that the stream hits a
target compression ratio (fixed-ratio mode). By default the error bound stays
fixed (fixed-accuracy mode).

## Dataflow

```
                      ┌──────────┐   ┌─────────┐   ┌───────────────┐   ┌─────────────┐
              ┌──────▶│histogram │──▶│std_unit │──▶│update_policy  │──▶│huff_codegen │  top path
              │       └──────────┘   └─────────┘   └───────────────┘   │(approx_sort)│
              │                                                        └──────┬──────┘
 in_data ┌────┴─────┐  symbols  ┌────────┐ codewords ┌──────────┐ out_data     │ lengths
 ───────▶│dual_quant│──────────▶│encoder │──────────▶│bit_packer│────────▶     ▼
  N lanes└────▲─────┘           └───┬────┘           └────┬─────┘        ┌──────────┐
              │                     └── reads ───────────────────────────│ codebook │  middle path
              │ scale = 1/(2eb)                           │ bits         └──────────┘
         ┌────┴─────┐                              ┌──────┴──────┐
         │eb_adjust │◀─────────────────────────────│ bit_counter │            bottom path
         └──────────┘                              └─────────────┘
```

`ceaz_top` wires these blocks together and holds the chunk controller.

## Symbols, outliers and escapes

`dual_quant` computes `q = round(d · scale)` with `scale = 1/(2·eb)`, held in
the same floating-point format as the data. Rounding is half away from zero.
Zero and subnormal inputs give 0. Overflow, Inf and NaN saturate.

The predictor is the previous value in stream order. Lane i uses lane i−1 of
the same beat, and lane 0 uses the last lane of the previous beat. The
prediction restarts at 0 at the first beat of each chunk, so every chunk can
be decoded on its own.

The difference δ = q − p becomes the symbol `δ + 512`. That gives 1024
symbols centred on 512, which is symbol 513 when counting from one. When
|δ| > 511 the value is an **outlier**: it is coded as symbol 0, and q itself
leaves on the `olr_*` side channel.

The online codebook is built from one chunk, so it may lack codewords for
symbols that appear later. Such a symbol is **escaped**: the encoder sends
symbol 0's codeword and puts the value on the outlier channel, just like an
outlier. For this to work, the code generator always gives symbol 0 a
codeword.

Reconstruction is `d ≈ q · 2eb`, which is within eb of the input. This holds
whether q came from the prediction or from the side channel.

## Chunks and the codebook update policy

This is the part that needs the most care. All times below are for the
default size: N = 32, 32 MB chunks, so 262,144 beats per chunk.

1. **Run.** Beats are taken while `in_ready` is high. The histogram counts
   every symbol, using one counter table per lane so that all 32 symbols of
   a beat count in one cycle.
2. **Chunk end.** The chunk ends after 32 MB or at a beat with `in_last`.
   `in_ready` drops, the pipeline empties (4 cycles), and the packer flushes
   the chunk's last, partly filled word with `out_last` set. `out_nbits` says
   how many of its bits are valid.
3. **Wait for the generator.** The previous chunk's codebook may still be
   under construction. In that case the engine waits. This is the only stall
   the policy causes, and `st_wait_codegen` shows it.
4. **Drain.** In 1024 cycles the histogram sums its lane tables bin by bin
   and clears them. The bins go at the same time to the STD unit and into
   the code generator's frequency table.
5. **Decide.** `std_unit` computes σ, the standard deviation of the 1024
   frequencies expressed in per mille of the chunk. This takes about 110
   cycles. `update_policy` compares χ = |σ_previous − σ_current| with
   τ0 = 3.05 and τ1 = 4.88:
   * χ ≤ τ0: **keep** the codewords.
   * τ0 < χ < τ1: **build** new codewords from this chunk. This starts the
     generator, which runs in the background while later chunks are encoded.
   * χ ≥ τ1: use the **offline** codewords.

   The first chunk after reset has no previous σ, so it always builds.
6. **Resume.** Input starts again, and the error bound has already been
   updated if fixed-ratio mode is on. In total the pause is about 1,150
   cycles per chunk, roughly 0.4 % of a chunk.

A finished codebook is written into the online bank that is not in use. It
takes over at the next chunk boundary, unless that boundary decides
"offline". So each chunk is coded with exactly one codebook. There are two
online banks, used ping-pong. If a built bank is still waiting to take over
when the next build starts, the new build writes the other bank.

### What a receiver needs

A receiver needs four things besides `out_data`:

* The codebook selection `st_cb_sel`. It changes only between chunks, so it
  can be sampled with any word of a chunk.
* The code lengths of each built bank, from the `cbw_*` side channel. The
  codes are canonical, so the lengths define them completely. Codes are
  assigned Deflate-style: shorter lengths first, and within one length,
  consecutive values in symbol order.
* The offline codebook, which the receiver loaded itself. Load it with
  `off_we`, `off_sym` and `off_cw`.
* The outlier values from `olr_*`, in stream order.

The bit stream is MSB first. Each chunk starts on a fresh word.

## The Huffman code generator

`huff_codegen` runs the seven classic steps in order, as a state machine:

1. **Filter** out zero-frequency symbols. Symbol 0 is always kept.
2. **Approximate sort** (`approx_sort`). Lorenzo residuals have a histogram
   that is symmetric and falls away from the centre. So instead of sorting,
   the sorter walks outward from the centre, compares the two symbols at
   equal distance, and writes the pair in order. The leftover side is copied
   as it is. This takes one pair per cycle, about n/2 cycles.
3. **Build the tree.** The two-queue method merges the sorted leaves, with
   no heap.
4. **Depths.** Compute every node's depth, then count the leaves at each
   depth.
5. **Limit lengths** to 24 bits, using the JPEG (Annex K.3) count
   adjustment.
6. **Assign lengths.** Canonical lengths go to the sorted leaves, longest to
   the least frequent.
7. **Assign codes.** First codes per length, then the codewords in symbol
   order. These are written into the online bank and onto `cbw_*`.

A full table of 1024 symbols takes about 7,800 cycles. That is roughly 3 % of
one chunk, so the generator is normally idle long before the next chunk ends.
It only holds up the engine when chunks are very short.

## Error-bound feedback (fixed-ratio mode)

`bit_counter` totals the bits and values of each chunk. At the end of the
chunk, `eb_adjust` computes:

* the compressed bit rate B = bits / values,
* the target B_target = W / C_target, with W = 32 or 64 and C_target in Q8.8,
* the new bound eb' = 2^(B − B_target) · eb.

The exponent is rounded to an integer. The update then just adds an integer
to the exponent field of `scale`, which is exact. `scale` is 1/(2eb), so it
moves the opposite way. The exponent is clamped to the normal range. The new
bound applies from the next chunk on. `st_eb_step` reports the last step.

## Top-level interface (`ceaz_top`)

| group | signals | meaning |
|---|---|---|
| clock | `clk`, `rst_n` | async active-low reset; after reset the offline bank is filled (1024 cycles) before input is taken |
| config | `fixed_ratio`, `c_target_q8`, `load_scale`, `scale_in` | mode, target ratio (Q8.8), initial 1/(2eb) in the data format |
| offline codebook | `off_we`, `off_sym`, `off_cw` | write one entry {length, code} of the offline bank |
| input | `in_valid`, `in_ready`, `in_data[N]`, `in_last` | valid/ready stream of N values per beat; `in_last` ends a chunk early |
| output | `out_valid`, `out_ready`, `out_data`, `out_nbits`, `out_last` | OUT_W-bit words; `out_last` marks a chunk's final word, `out_nbits` its valid bits |
| outliers | `olr_valid`, `olr_mask`, `olr_q[N]` | prequantized values of outlier/escaped lanes |
| codebook out | `cbw_valid`, `cbw_bank`, `cbw_sym`, `cbw_len` | code lengths of each newly built bank |
| status | `st_cb_sel`, `st_act*`, `st_sigma`, `st_chi`, `st_scale`, `st_eb_step`, `st_total_bits`, `st_escape`, `st_codegen_*`, `st_wait_codegen` | codebook in use, decisions, statistics |

Parameters: `N` = 32 lanes, `DATA_W` = 32, `Q_W` = 32, `OUT_W` = 1024 and
`CHUNK_BYTES` = 32 MiB. For the double-precision configuration use
`DATA_W = 64, N = 16`; that still fills the 1024-bit bus.

Throughput: one beat per cycle. At the 300 MHz clock of the reference
implementation, that is 38.4 GB/s of FP32 input, minus the pause at each
chunk end. Output backpressure stalls the whole pipeline, which keeps every
stage in lock step.

## Where this design follows the paper and where it chooses

**Follows the paper:**

* the three dataflow paths and their blocks
* dual quantization with N lanes
* 1024 symbols, symmetric around the centre
* the approximate sort, taken from the paper's algorithm
* the seven codebook steps
* the STD-based keep / build / offline rule with τ0 = 3.05 and τ1 = 4.88
* encoding the first chunk with the offline codewords
* the 32 MB update size
* the 1024-bit bus with 32 or 16 lanes
* the feedback rule eb' = 2^(B − B_target) · eb

**This design's own choices** (the paper does not specify them):

* the 1-D predictor in stream order, restarted at each chunk
* the symbol mapping and the outlier side channel
* the escape rule
* per-mille frequencies for σ, computed with exact integer arithmetic
* σ = τ1 counts as "offline", because the paper's rules overlap at that
  point
* the 24-bit length limit and the JPEG truncation
* two online banks with switching at chunk boundaries
* the stall-free background build
* the chunk controller and its pause
* integer steps of the error-bound exponent
* the bit rate for the error-bound update comes from the last chunk only.
  The original estimate counts everything compressed so far, but a running
  total keeps correcting again for chunks that were already coded with the
  old bound.
* the Q8.8 target ratio
* the lengths-only codebook side channel

**Offline codebook.** The paper trains offline codebooks on families of
datasets and keeps them in a repository, but gives no tables. This engine
therefore comes out of reset with a generic stand-in: an order-0
exponential-Golomb code on the zig-zag mapped residual, at most 21 bits.
Load a trained table with `off_we`.

**Codebook storage.** The paper counts the cost of storing codewords with
each update. Here the codebook leaves on its own side channel (1024 lengths
of 5 bits each, 5,120 bits per update) rather than inside the bit stream.

**Parts outside this RTL.** The host, PCIe, HBM, the memory-to-stream mover
and the Ethernet/QSFP28 output are board, vendor or host parts. The engine's
input and output streams are where they connect.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against a model written independently in the testbench and ends with a
`TB_RESULT checks=… failures=…` line. Run a testbench with plain verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ceaz_pkg.sv tb/tb_ceaz_top.sv \
          --top-module tb_ceaz_top -o sim && ./obj_dir/sim +verilator+rand+reset+2
```

* `tb_ceaz_top` checks the whole engine at reduced size: 4 lanes, 4 KB
  chunks and 128-bit words.
  * It sends twelve chunks whose statistics change on purpose.
  * It decodes the bit stream itself. Online codebooks are rebuilt from
    `cbw_*`, and outliers come from `olr_*`.
  * It checks every reconstructed value against round(d · scale).
  * It counts each mechanism and fails if one never happened: keep, build,
    offline, switching to and from an online bank, escapes, outliers, output
    backpressure, waiting for the generator, an error-bound change in
    fixed-ratio mode, and an early chunk end.
* `tb_ceaz_top_fp64` runs the same end-to-end test in the double-precision
  configuration (`DATA_W = 64`, 4 lanes). Its inputs carry detail below
  FP32 resolution, and the fixed-ratio target is 21.
* `tb_ceaz_top_full` runs the engine with every parameter at its default.
  * It sends one full 32 MB chunk (8.4 million values) and two shorter
    chunks.
  * It decodes all of them, the last with a built online codebook.
  * It checks the totals against the bit counter.
  * Verilator runs it in under a minute.
* The block tests cover the following:
  * rounding and outliers in FP32 and FP64
  * histogram clearing between chunks
  * σ against a floating-point model
  * every policy region and its edges
  * the approximate sort against the paper's algorithm, including cycle
    counts
  * Huffman tables that are peaked, sparse, single-symbol, empty, full, and
    a Fibonacci table that forces length limiting. These are checked against
    a full software model, the Kraft sum and the canonical order.
  * the packer's word boundaries under backpressure
  * the error-bound steps

**Known limits:**

* Double precision runs through the whole engine only at reduced lane
  count. The full-size run uses the default single-precision
  configuration.
* The adaptive thresholds work on per-mille frequencies. This is an
  interpretation, because the paper does not state the unit of σ.
