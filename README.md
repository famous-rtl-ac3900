# Tiled multi-head attention accelerator (FAMOUS architecture) in SystemVerilog

This is synthesizable RTL for the multi-head attention (MHA) layer of a
transformer. It follows the architecture of FAMOUS (E. Kabir et al., "FAMOUS:
Flexible Accelerator for the Attention Mechanism of Transformer on UltraScale+
FPGAs", FPT 2024). In that design, every attention head has its own processing
modules and on-chip buffers, and all heads work in parallel. The weight
matrices are too large to keep on chip, so they are cut into tiles along the
embedding dimension and streamed in one tile at a time. The model sizes (number
of heads, embedding dimension, sequence length) can be changed at run time,
within the sizes the hardware was built for.

The original was written in C for a high-level-synthesis tool. Its paper gives
the block structure, the tiling scheme, the built sizes and the results, but
not the cycle-level design. Every cycle-level detail here (loop order,
pipelines, number formats, softmax, host protocol) is therefore this design's
own choice. The section "Relation to the FAMOUS paper" lists these choices.

## What it computes

For each head `i`, with input `X` (SL tokens by d_model features):

    Q_i = X W_Q,i + B_Q,i     K_i = X W_K,i + B_K,i     V_i = X W_V,i + B_V,i
    Z_i = softmax( mask( Q_i K_i^T / sqrt(d_k) ) ) V_i          d_k = d_model / h

The outputs `Z_i` of all heads are placed side by side (concatenated), which
gives one d_model-wide row per token. The output projection that normally
follows MHA is not part of the accelerator.

Built sizes (parameters of `famous_top`, all taken from the paper's main
configuration):

| parameter | default | meaning |
|-----------|---------|---------|
| `H`       | 8       | head units working in parallel |
| `D_MODEL` | 768     | largest embedding dimension |
| `TS`      | 64      | tile size (embedding columns per tile) |
| `SL`      | 64      | largest sequence length |
| `DK`      | 96      | columns per head, `D_MODEL / H` |

All data is 8-bit signed fixed point. Sums are kept at 32 bits.

## Structure

    host ──load port──► per head h (H copies, in parallel):
                        ┌──────────── qkv_pm ───────────────┐
                        │ input_bram  (SL x TS, X tile)     │
                        │ weight_bram (3 x DK x TS + biases)│──► qkv_buffer Q ─┐
                        │ pe_qkv (3 x TS multipliers)       │──► qkv_buffer K ─┼─► qk_pm (PE_QK) ─► qk_buffer
                        └───────────────────────────────────┘──► qkv_buffer V ─┐           (SL x SL)
                                                                               │              │
                                              attn_score_buffer ◄── sv_pm ◄────┘ ◄── softmax_unit
                                              (SL x H x DK)        (DK MACs)
    famous_ctrl: runtime parameters, tile handshake, phase sequencing

`attention_head` wires one head together, and `famous_top` instantiates `H`
heads, the controller and the output buffer. The heads run in lockstep. One
controller starts each phase in every active head, and head 0's done pulse
ends the phase.

A run has three phases:

1. **QKV, once per tile.** The controller asks the host for tile `k`. The host
   writes it into every active head. Then `qkv_pm` walks the rows `s < seq_len`
   and the output columns `j < dk`, one `(s, j)` pair per cycle, with `j` as
   the inner loop. It reads row `s` of the input tile and row `j` of the three
   weight tiles. `pe_qkv` forms three 64-term dot products in parallel, one
   each for Q, K and V. The three partial sums go to the Q, K and V buffers,
   which add them to what they already hold.
2. **QK.** `qk_pm` reads row `s` of Q and row `t` of K. It requantizes both
   rows to 8 bits and takes a 96-lane dot product. That gives one score
   `S[s][t]` per cycle, which goes into the score buffer.
3. **Softmax and SV, row by row.** `softmax_unit` turns row `s` of the scores
   into 8-bit probabilities and streams them out. In `sv_pm`, each probability
   `p[t]` is sent to 96 multiply-accumulate elements together with row `t` of
   V. After the last `t`, the 96 sums, brought back to 8 bits, are written as
   row `s` of that head's output.

## Tiling of the projection

This is the idea that lets a 768-wide model fit. Each head needs only its own
96 columns of each weight matrix, so the weights are already narrow in the
output direction. The tiling therefore cuts only along the embedding
dimension, which is the dimension the dot product runs over. Tile `k` holds
columns `k*TS .. k*TS+TS-1` of X and the matching `TS` rows of each `W`. The
weights are stored transposed: row `j` of a weight bank holds the 64 weights
that feed output column `j`.

    Q[s][j] = B[j] + sum over tiles k of ( sum_{i<TS} X[s][k*TS+i] * W[k*TS+i][j] )

On chip, each head holds one tile: an SL x TS input buffer and three DK x TS
weight banks. Each tile is loaded once per run, `d_model / TS` times in all
(12 times at 768). The Q, K and V buffers hold the running sums. On the first
tile, the partial sum includes the bias and overwrites the old value. On later
tiles it is added. The buffers keep full 32-bit precision, so the sum over
tiles is exact. The values are cut to 8 bits only when they are read.

The buffer update is a read-modify-write: the old entry is read in the cycle
the partial sum arrives and written back one cycle later. This is safe because
consecutive partial sums always go to different entries, and an assertion in
`qkv_buffer` checks that.

## Number formats and the softmax

| quantity | format |
|----------|--------|
| X, W, biases | signed 8-bit |
| Q, K, V in the buffers | signed 32-bit sums. A bias `b` enters as `b << qkv_shift` |
| Q, K, V used by QK and SV | `sat8(value >>> qkv_shift)` |
| scores S | signed 32-bit |
| scaled score y | `(S * sm_scale) >>> 16`, in units of 1/16 |
| probabilities p | unsigned 8-bit, 256 stands for 1.0 (255 at most) |
| output Z | `sat8( (sum_t p[t] * V8[t][j]) >>> 8 )` |

`sm_scale` combines the `1/sqrt(d_k)` factor with the fixed-point scale of
Q and K, so it is a runtime value that the host computes. The testbenches use
`qkv_shift` large enough to bring the typical Q/K/V magnitudes to about 60.
They set `sm_scale = 65536 * 24 / (60 * 60 * sqrt(dk))`, which gives y a
spread of roughly 1.5 in natural units.

The softmax (`softmax_unit`) makes three passes over a score row:

* **MAX** finds `m`, the largest `y[t]` among the columns the mask lets
  through. It reads one score per cycle.
* **EXP** computes `e[t] = 32768 * exp((y[t] - m)/16)` with base-2
  arithmetic. It forms `u = floor(d * 23637 / 2^14)`, which is about
  `d * log2(e)`, with `d = m - y` limited to 65535. The integer part of
  `u/16` becomes a right shift. The fractional part indexes the table
  `EXP2_LUT[f] = round(32768 * 2^(-f/16))`, f = 0..15. The `e[t]` values are
  kept in a row register, and their sum is accumulated.
* **DIV** computes `r = floor(2^31 / sum)` with a 32-cycle restoring divider.
  The largest element contributes 32768, so the sum is never zero.
* **OUT** sends `p[t] = min(255, (e[t] * r + 2^22) >> 23)`, one per cycle.

The testbench checks the result against a floating-point softmax of the same
scaled scores. The largest deviation seen is 3/256.

The mask is a causal mask. With `mask_en` set, column `t > s` is excluded
from row `s` and its probability is 0.

## Runtime programming and the host protocol

The runtime parameters form one record, `famous_pkg::cfg_t`. It is latched
when `start` is pulsed:

| field | range | meaning |
|-------|-------|---------|
| `n_heads`  | 1..H  | head units to run (the others stay idle) |
| `n_tiles`  | 1..D_MODEL/TS | embedding dimension / TS |
| `dk`       | 1..DK | columns per head |
| `seq_len`  | 1..SL | tokens |
| `mask_en`  | 0/1   | causal mask |
| `qkv_shift`| 0..31 | requantization shift of Q/K/V |
| `sm_scale` | 16 bit| softmax input scale, see above |

An assertion in `famous_ctrl` flags values that exceed the built sizes.

Protocol, all synchronous to `clk`, with reset `rst` synchronous and active
high:

1. Drive `cfg_in` and pulse `start`.
2. While `tile_req` is high, write tile `tile_idx` through the load port into
   every active head, then pulse `tile_loaded`. The load port takes one write
   per cycle: `ld_we`, `ld_head`, `ld_sel`, `ld_addr` and `ld_data`, which is
   TS bytes, i.e. 512 bits. There are three kinds of write:
   * `LD_X` with `addr = s` writes row `s` of the X tile.
   * `LD_WQ`, `LD_WK` or `LD_WV` with `addr = j` writes the 64 weights of
     output column `j`.
   * `LD_BQ`, `LD_BK` or `LD_BV` with `addr = c` writes bias entries
     `c*64 .. c*64+63`. Biases are needed only before tile 0.
3. Wait for the `done` pulse, then read the output: address `rd_row` and
   `rd_head`, and one cycle later `rd_data` holds that head's 96 outputs for
   that token. Columns `>= dk` read as 0.

To run a model with more heads than are active, the host runs the model's
heads in several passes. For example, with `n_heads = 4` an 8-head model takes
two runs, each loading the weights of 4 heads. A model whose `d_k` exceeds 96
does not fit.

## Timing

Compute cycles of one run, excluding the cycles spent waiting for tiles:

    n_tiles * (seq_len*dk + 7)        QKV passes (6-cycle pipeline and drain + 1 hand-over)
  + seq_len^2 + 5                     QK
  + seq_len * (3*seq_len + 34) + 5    softmax and SV

At the built sizes this is 12 * 6151 + 4101 + 14,469 = 92,382 cycles. The
end-to-end testbench checks this count exactly. Loading one tile into 8 heads
through the single load port takes 8 * (64 + 3*96) = 2816 cycles, about
34,000 per run. The design has no double buffering, so loading and computing
do not overlap.

Per head, there are 192 multipliers in `pe_qkv`, 96 in `pe_dot` for QK and
96 MACs in SV: 384 per head, or 3072 for 8 heads. The storage per head is
about 0.9 Mbit (the Q, K and V buffers at 32 bits, the score buffer, and the
tile buffers), plus the output buffer.

## Relation to the FAMOUS paper

Taken from the paper:

* the three processing modules per head (QKV, QK, SV) with their Q, K, V, QK
  buffers and the softmax between QK and SV;
* one set of modules per head, all heads in parallel;
* tiling only along the embedding dimension, with tiles loaded
  `d_model / TS` times, an SL x TS input buffer per head and partial results
  summed over tiles;
* Q and K not tiled;
* runtime-programmable head count, embedding dimension and sequence length;
* 8-bit fixed-point data;
* the default sizes 8 / 768 / 64 / 64.

This design's own choices, where the paper is silent:

* the fully unrolled dot-product arrays and their loop orders;
* the 32-bit accumulators and the requantization by shift;
* the bias format;
* every detail of the softmax, including the number formats, the base-2
  exponential, the divider and the choice of a causal mask (the paper only
  names a mask);
* the configuration record and the tile handshake;
* the load and read ports;
* the phases running strictly in sequence;
* synchronous reset.

Points of interpretation:

* The paper's figure of the tiling draws each weight tile as a single column
  and still sums the tile outputs. Its text describes tiles of TS embedding
  columns whose partial products are summed, and that reading is what is
  built.
* The paper's runs with 4 and 2 heads have the same operation count as the
  8-head run (0.308 GOP). They are read here as the same 8-head model computed
  on fewer active head units, which is how `n_heads` behaves.
* The paper also reports a run with sequence length 128. The built
  sequence length is 64, so that run does not fit this RTL.
* The paper's latency and resource figures come from its own
  high-level-synthesis implementation. They are not reproduced here.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. The expected values
come from `tb/famous_ref_pkg.sv`, a software model of the number formats
written from the definitions above. In that model, the exponential table is
computed from `2^(-f/16)` rather than copied.

* `tb_famous_top` runs a reduced accelerator (2 heads, d_model 64, TS 16,
  SL 8) four times: at the built sizes; with the mask; with one head, 2 tiles
  and a short sequence; and with one tile and small d_k. Each run compares
  every output byte and the exact compute-cycle count. The testbench also
  counts how often each mechanism occurred: multi-tile accumulation, mask,
  fewer heads, reduced d_k, short sequence, and 8-bit saturation.
* `tb_famous_full` runs the accelerator at its default sizes, once without
  and once with the mask. It checks all 8 x 64 x 96 outputs of each run
  against the reference and checks the 92,382-cycle compute time. It
  simulates in a few seconds.
* `tb_famous_workloads` uses the same default build and reprograms it at run
  time for other model shapes: 4 and 2 active heads, d_model 512 and 256
  (fewer tiles), and sequence lengths 32 and 16 (the latter with the mask).
  Every output and every compute-cycle count is checked.
* The block testbenches also check the latencies listed in each module's
  header.

Running a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/famous_pkg.sv tb/famous_ref_pkg.sv tb/tb_famous_full.sv \
        --top-module tb_famous_full -o sim && obj_dir/sim

For another testbench, replace `tb_famous_full` with its name. Verilator
finds the other modules through `-Irtl -Itb`.

## Files

`rtl/famous_pkg.sv` holds the shared types, sizes and the requantization
function. Each of the other files in `rtl/` is one module, named after it.
In `tb/`, `famous_top_harness.sv` is the end-to-end host model, and
`tb_<module>.sv` is the testbench of each module.
