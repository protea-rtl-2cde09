# ProTEA-style transformer encoder accelerator in SystemVerilog

A transformer encoder layer applies multi-head self-attention and then a position-wise feed-forward network to a matrix of `sl` tokens by `d` features. Two layer normalisations with residual connections sit between those steps. This design computes whole encoder stacks in fixed point. It is built for an FPGA, with all weights kept in external memory. Its main idea is that the hardware is synthesised once for the largest model it must serve (sequence length 64, embedding dimension 768, 8 heads). The actual sequence length, embedding dimension, head count and layer count are then set at run time through registers. Any model up to those maxima can then run without rebuilding the hardware.

Two mechanisms make that possible:

* **Tiling.** No weight matrix is ever held on chip whole. The engines see one tile at a time. A tile is `TS_MHA = 64` input columns in attention, and `TS_FFN = 128` (or 512) columns by 128 rows in the feed-forward part. Partial results accumulate over the tiles. The embedding dimension at run time only changes how many tiles are walked.
* **Parallel heads with per-head engines.** Each of the 8 heads has its own Q/K/V engine, Q·Kᵀ engine, softmax and S·V engine, and all of them run at the same time. When a model has fewer heads, the extra engines stay idle.

## Number format

| Quantity | Format |
|---|---|
| activations, weights, biases, LN gamma/beta | signed 8 bit, 4 fraction bits (Q3.4, range −8 … +7.9375) |
| products and sums | 32-bit accumulators (8 fraction bits after one product) |
| requantisation | arithmetic shift right by 4, saturate to [−128, 127] |
| attention scores Q·Kᵀ / d | signed 16 bit, 8 fraction bits |
| softmax probabilities | signed 8 bit, 7 fraction bits (1.0 saturates to 127) |

All of this is in `rtl/protea_pkg.sv` (`FRAC`, `SFRAC`, `PFRAC`, `requant`, `sat8`).

## Dataflow of one layer

```
 X (layer input buffer) ─┬─► [per head] QKV engine ─► Q,K,V ─► QK engine ─► softmax ─► SV engine ─┐
                         │                                                                       │
                         │        attention-score buffer (sl x d, heads concatenated) ◄──────────┘
                         │                      │
                         │                    FFN1 (d→d)
                         │                      │
                         └────── residual ──► LN1 ──► LN1 buffer ─┬─► FFN2 (d→4d, ReLU) ─► FFN3 (4d→d)
                                                                  │                              │
                                                                  └──────── residual ───────► LN2 ──► X of next layer
```

The controller in `protea_top` runs these stages one after another:

1. Load X from memory. This happens for layer 0 only. Later layers read the previous layer's LN2 result from the same buffer.
2. For each of the `d/64` attention tiles:
   * copy the 64 X columns of the tile into every head's input BRAM;
   * stream that tile's rows of Wq, Wk and Wv for every head from memory;
   * run all Q/K/V engines.
3. Load the Q/K/V biases while the last tile is still computing. Then finalise Q/K/V: add the biases, requantise and fill the Q, K and V buffers.
4. Run Q·Kᵀ, softmax and S·V in all heads at once. Each head writes its `d_k` result columns into the attention-score buffer. This concatenates the heads.
5. Run FFN1, LN1, FFN2, FFN3 and LN2, each as a walk over weight tiles.
6. If this is the last layer, stream LN2's results out on `y_*` and raise `irq_done`.

## Attention engines (per head)

**QKV engine** (`qkv_ce`). It holds:

* an input BRAM of `sl x 64` bytes;
* three weight BRAMs of `d_k x 64` bytes;
* three 64-lane PE arrays;
* three `sl x d_k` accumulator arrays.

A tile run computes `acc[i][k] (+)= Σ_j x[i][j]·w[k][j]` for all three matrices at once, one `(i, k)` per cycle. The first tile overwrites the accumulators and later tiles add to them. `fin` adds `bias << 4`, requantises and writes the Q, K and V buffers. V is stored so that a column can be read as a vector. A tile takes `sl·d_k + 2` cycles.

**QK engine** (`qk_ce`). It has `d_k` lanes (96 at the maximum). Lanes at or beyond the runtime `d_k` are masked. Each score is divided by the runtime `d` and kept with 8 fraction bits. It takes `sl² + 2` cycles.

**Softmax** (`softmax_unit`) makes three passes over each row:

1. Find the row maximum.
2. Compute `e = 2^((s − max)·log2 e)`. The fractional part comes from a 16-entry table with entries `round(65536·2^(−f/16))`, and the integer part is a right shift. The terms are summed.
3. Compute `p = min(127, (e << 7) / sum)`.

Columns at or beyond `sl` become 0. It takes about `3·sl²` cycles.

**SV engine** (`sv_ce`). It has `sl` lanes (64). Output `(i, j)` is the dot product of probability row `i` with V column `j`, shifted right by 7 and saturated. It is written to column `head·d_k + j` of the attention-score buffer. It takes `sl·d_k + 2` cycles.

## Feed-forward engines and the tile walk

`ffn_ce` is one parameterised engine. It holds an input-tile BRAM (`sl x IN_TILE`), a weight-tile BRAM (`OUT_TILE x IN_TILE`), an `IN_TILE`-lane PE array and an `sl x OUT_MAX` accumulator, which serves as the stage's output buffer. There are three instances:

| instance | maps | IN_TILE x OUT_TILE | PEs | tile pairs per layer (d = 768) |
|---|---|---|---|---|
| FFN1 | d → d | 128 x 128 | 128 | (d/128)² = 36 |
| FFN2 | d → 4d, ReLU | 128 x 128 | 128 | 4·(d/128)² = 144 |
| FFN3 | 4d → d | 512 x 128 | 512 | (d/128)² = 36 |

For each output tile `ot`, the controller walks all input tiles `it`. For each pair it:

* copies activation columns `it` into the engine;
* streams the 128 weight rows `ot·128 … ot·128+127` (columns `it`) from memory;
* starts a run that accumulates into output columns of tile `ot`, with `first` set when `it = 0`.

A tile pair takes `sl·128 + 2` cycles. After the last pair, `fin` streams the requantised results (with ReLU on FFN2) into the next buffer.

## Layer normalisation

`layer_norm` processes one row of length `d` at a time:

* **Input.** It takes `x + residual` and stores the saturated 8-bit sum.
* **Mean.** It sums the row and divides by `d`.
* **Variance.** It sums the squared deviations and divides by `d`.
* **Square root.** It takes the integer square root by a 16-step digit recurrence. The standard deviation is clamped to at least one LSB, which takes the place of an epsilon.
* **Output.** It produces `y = gamma·((x − mean)/std) + beta` in Q3.4.

A row takes `3d + 18` cycles. Gamma and beta sit in a small buffer that is loaded from memory before each LN stage.

## External memory and loading

Everything is fetched through one AXI4 read master (`axi_read_master`). It has 8-bit data and INCR bursts of at most 256 beats, and no burst crosses a 4 KB boundary. There is one request in flight at a time. Matrices are stored `[out][in]`, so every tile row is one contiguous run. Layer `n`'s parameters start at `WBASE + n·(12d² + 7d)`:

| offset | contents |
|---|---|
| 0 | Wq, Wk, Wv (each d x d; head `h` owns rows `h·d_k …`) |
| 3d² | bq, bk, bv (d each) |
| 3d² + 3d | W1 (d x d) |
| 4d² + 3d | LN1 gamma, beta |
| 4d² + 5d | W2 (4d x d) |
| 8d² + 5d | W3 (d x 4d) |
| 12d² + 5d | LN2 gamma, beta |

X is `sl x d` bytes, row major, at `XBASE`.

## Control registers (AXI4-Lite, `axil_regs`)

| addr | name | meaning |
|---|---|---|
| 0x00 | CTRL | bit 0: write 1 to start |
| 0x04 | STATUS | bit 0 busy, bit 1 done, bit 2 memory error (SLVERR/DECERR on a read), bit 3 configuration refused |
| 0x08 | SL | sequence length (1 … 64) |
| 0x0C | DMODEL | embedding dimension (multiple of 128, ≤ 768) |
| 0x10 | HEADS | heads (1 … 8, with d/heads ≤ 96) |
| 0x14 | LAYERS | encoder layers (≥ 1) |
| 0x18 | XBASE | byte address of X |
| 0x1C | WBASE | byte address of layer 0's parameters |

A start with a configuration the hardware cannot hold is refused, and STATUS bit 3 is set.

## Resource arithmetic

With the defaults, the multiplier count is:

* attention: 8 heads × (3·64 QKV + 96 QK + 64 SV) = 2816
* FFN: 128 + 128 + 512 = 768

That totals 3584 multipliers. This design maps each one to one DSP slice, which matches the size the original FPGA implementation reports (about 3600 DSPs).

## Where this RTL departs from the original design

* **Little overlap of loading and computing.** Only the bias load runs during computation, in the last attention tile. Weight and input loads run one after another with computation. The original overlaps them. Most of the cycles for a large model are therefore spent loading, at one byte per cycle.
* **Score scaling.** Scores are divided by `d`, as in the original's Q·Kᵀ algorithm, not by `√d_k` as in the textbook attention formula. No attention mask is applied.
* **Maximum sequence length is 64.** That is the synthesis value. A sequence length of 128 would need `SL_MAX = 128`.
* **Heads with `d/h > 96` are refused.** At `d = 768` this means 4 heads and 2 heads. The per-head buffers are sized for 8 heads.
* **Own choices.** No FFN biases are applied, and the original describes none. ReLU is applied after FFN2. Residual adds are placed in front of LN1 and LN2. The fixed-point formats, the memory layout and the register map are this design's own.
* **Control.** The controller is a fixed sequencer. It is not an instruction-driven engine loaded by a host.

## Files

| file | block |
|---|---|
| `rtl/protea_pkg.sv` | formats, limits, config struct, memory-layout functions |
| `rtl/pe_array.sv` | LANES-wide dot product (the PE row) |
| `rtl/qkv_ce.sv`, `rtl/qk_ce.sv`, `rtl/softmax_unit.sv`, `rtl/sv_ce.sv` | attention engines |
| `rtl/ffn_ce.sv`, `rtl/layer_norm.sv` | feed-forward engines, LN |
| `rtl/axi_read_master.sv`, `rtl/axil_regs.sv` | memory and control interfaces |
| `rtl/protea_top.sv` | buffers, heads, controller |
| `tb/tb_<block>.sv` | self-checking unit testbenches |
| `tb/hbm_model.sv` | AXI4 read-slave memory model with random wait states |
| `tb/protea_ref_pkg.sv` | bit-exact reference model of a whole encoder stack |
| `tb/tb_protea_top.sv` | end-to-end test on a reduced build (sl ≤ 8, d ≤ 32, 4 heads, tiles of 8). It covers several runs, including a refused configuration, and counts every mechanism. |
| `tb/tb_protea_full.sv` | quick end-to-end test of the default-size build (runtime sl 4, d 128, 8 heads, 1 layer; 0.26 M cycles) |
| `tb/tb_protea_workloads.sv` | default-size build running one full layer of the main configuration (sl 64, d 768, 8 heads) and of sl 64, d 256. It also checks that sl 128, and d 768 with 4 or 2 heads, are refused. |

## Simulating

With Verilator 5, for any testbench `T`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/protea_pkg.sv $(ls rtl/*.sv | grep -v _pkg) tb/hbm_model.sv tb/protea_ref_pkg.sv tb/T.sv \
  --top-module T -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. The end-to-end tests compare every output byte against `protea_ref_pkg::encoder`. That model computes the same fixed-point arithmetic, without tiling, directly from the memory image. The testbenches also check the cycle counts the engines promise.

The largest configuration simulated is the full main one: sl 64, d 768, 8 heads, on the default-size build. One layer takes 11.57 M cycles and about 1.5 minutes of Verilator time. At 200 MHz that is 58 ms per layer. The original reports 279 ms for 12 layers, about 23 ms per layer. The gap comes from the 7.08 MB of weights per layer. Here they are loaded at one byte per cycle, and loading is mostly not overlapped with compute. A wider memory port, or a second one used for prefetching, is the place to start for speed.
