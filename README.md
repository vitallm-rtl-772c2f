# VitaLLM: a mixed-precision decode engine for ternary-weight LLMs

BitNet b1.58 style language models keep every projection weight in
{-1, 0, +1}. Activations and attention stay INT8. A decoder layer therefore
has two kinds of arithmetic:

- ternary x INT8 products for the projections, which need only add, subtract or skip;
- INT8 x INT8 products for the attention scores and the weighted value sum.

This RTL implements an accelerator built around that split. The main ideas are:

1. **Two kinds of 8x8 arrays.**
   - Three TINT arrays do only ternary select-accumulate and have no multipliers.
   - One BoothFlex array is a radix-4 Booth multiplier array that runs INT8 x INT8 in five bit-serial steps, or ternary x INT8 in one step.
   - During attention BoothFlex multiplies INT8. Afterwards it joins the TINT arrays on the output and feed-forward projections, so it is never idle.
2. **Predict before fetching.**
   - Before any key or value is read from the off-chip KV cache, a cheap surrogate score ranks all cached tokens.
   - The surrogate replaces every product q_i k_i by ±2^(LO(q_i)+LO(k_i)), where LO is the position of the leading one.
   - A comparison-free top-K selector keeps the best K tokens. Only their key and value blocks are fetched.
3. **Head-level pipelining.**
   - Head h's attention runs on BoothFlex while the TINT arrays compute head h+1's Q, K and V projections.
4. **One interface between all operators: (INT8 vector, one scale).**
   - Every vector, projection output or attention output, passes through one nonlinear unit.
   - That unit reduces the vector while it is still being produced (absmax, sum of squares, online softmax).
   - After the last tile it quantizes the vector once. The end of the reduction is the synchronisation point, called the quantization barrier.

One command to the top runs one decoder layer for one token (decode):

- 32 heads of Q, K and V projections;
- top-K sparse attention over up to 2048 cached tokens;
- the output projection with RMSNorm;
- the gate, up and down projections.

## Layer schedule

```
 TINT x3 :  Q0 K0 V0 | Q1 K1 V1 | Q2 K2 V2 | ...  | Q31 K31 V31 |     O  G  U  D   (ternary)
 BoothFlex:           | attn 0   | attn 1   | ...  |             | attn 31 | O G U D (ternary)
                        LOP->top-K->QK^T->softmax->SV   (INT8)
```

The `head_scheduler` issues the jobs in this order:

- It starts the attention of head h as soon as V_h is quantized, then moves straight on to Q_{h+1}.
- It waits only if head h-1 is still in attention, so there is a one-head offset.
- Q is double-buffered by head parity, so Q_{h+1} never overwrites a query that is still being read.
- Attention reads its query and writes its output through addresses latched when it starts.

After the last head, BoothFlex switches to ternary mode and all four arrays share the O, G, U and D projections. Each BoothFlex tile costs one cycle per chunk in this mode, the same as TINT.

A projection is one *job*: an output vector of `n_tiles` tiles of 8 rows, each reducing `kc` chunks of 8 inputs. The `tile_dispatcher` deals the tiles in rounds:

- The three TINT arrays take tiles `4r`, `4r+1` and `4r+2` in lock step. They share one activation word per cycle from data-buffer port A.
- In dual mode BoothFlex takes tile `4r+3`. It reads port B and weight bank 3 on its own schedule.
- Weight bank j holds core j's blocks at `w_base + round*kc + chunk`.
- Jobs take their weights consecutively. The 512-word banks are used as ring buffers, so a streaming DMA can refill them behind the readers.

## Compute arrays

### TINT (`tint_core`)

- Each PE decodes a 2-bit ternary code and passes +a, -a or 0: 01 = +1, 11 = -1, 00 = 0, and 10 is treated as 0.
- Each row sums its eight selects with an adder chain.
- A head mux adds either 0 (first chunk of a tile) or the row register (later chunks).
- The result is 64 select-accumulates per cycle and eight 32-bit outputs per tile.
- `out_valid` follows the cycle that carries `last` by one clock.

### BoothFlex (`boothflex_core`)

- The multiplier operand of every PE is recoded in overlapping 3-bit windows {y(2i+1), y(2i), y(2i-1)} into digits -2..+2.
- INT8 mode:
  - An 8-bit multiplier needs N = ceil((8+1)/2) = 5 windows.
  - They are processed most significant first: `PS <- (PS << 2) + PP`, where PP is the row sum of the eight digit x multiplicand products.
  - One chunk is accepted every 5 cycles (`in_ready`).
- Ternary mode:
  - The 2-bit code is zero-padded to a single window: 11 -> 110 = -1, 01 -> 010 = +1, 00 -> 000 = 0.
  - One chunk is accepted per cycle.
- A second-stage accumulator per row (adder, zero mux, register) sums the chunks of a tile.
- Code 10 would pad to digit -2. It never occurs, and an assertion flags it.

In attention mode the multiplicand is:

- for QK^T: a query chunk, against a key block with rows = tokens;
- for SV: a probability chunk, against a transposed value block with rows = dimensions.

## Predictive sparse attention

### LOP score (`lop_core`)

- The query of the head is loaded once. A leading-one detector turns each INT8 element into a 5-bit feature: nonzero, sign, LO = floor(log2|x|), 3 bits.
- Key features arrive precomputed from the K_LO cache, 8 tokens x 8 dimensions per cycle.
- Each ExpAdd PE forms `±(1 << (LO(q)+LO(k)))`, or 0 if either operand is zero. Rows accumulate over the head's dimension chunks.
- One group of 8 token scores leaves every `hc` cycles. `hc` is the head dim / 8, which is 13 for head dim 100 padded to 104.

### Top-K without comparators (`topk_selector`)

The selector works in three steps:

1. **Collect.** Each score is mapped to one of 64 bins: bin 0 for s <= 0, otherwise `1 + 2*floor(log2 s) + next bit`, which gives two bins per octave. A histogram counts bins, and the bins are stored per token.
2. **Scan.** A high-to-low prefix scan over the histogram finds the cut bin, where the running count first reaches K. It also finds how many tokens of the cut bin are still needed (the quota).
3. **Emit.** The stored bins are re-read 8 per cycle. A token is kept if its bin is above the cut, or if it is in the cut bin and the quota is not used up (lowest index first).
   - A prefix-count compaction, which acts as 8-wide priority encoding, emits up to 8 indices per cycle.
   - Exactly min(K, M) tokens are kept.
   - Latency after the last score: one scan cycle plus one cycle per group of 8 tokens.

The ordering is coarse by design. Tokens whose scores fall in the same bin are ranked by position, not by exact score.

### Exact attention on the kept set (`attention_engine`)

- For each group of 8 kept tokens and each dimension chunk, the engine requests one 8x8 key block: `kv_req_tok[8]`, `kv_req_chunk`, `kv_req_is_v=0`. Responses return in order.
- QK^T scores go to the nonlinear unit as a softmax vector of `n_keep` elements.
- The probabilities are read back. For each output dimension chunk, the engine requests the value blocks of the kept tokens and runs SV.
- The head output is quantized by absmax into its slot of the concatenated attention vector.
- KV traffic per head is `2 * ceil(K/8) * hc` blocks instead of `2 * ceil(M/8) * hc`. For K = 32 and M = 2048 that is 104 blocks instead of 6656.

## The quantization barrier (`nonlinear_unit`)

This unit is the hardest part to follow. Every operator boundary in the layer goes through it. It handles one vector at a time.

1. **Announce.** The vector is announced with mode, tile count, element count, input scale and output address. Only one client owns the unit per vector: the attention engine has priority, and the scheduler's projections come second.
2. **Stage A (fused dequantization).** `raw = (acc * scale) >> 8`, saturated to 32 bits.
   - Raw values have 8 fraction bits. Scales are unsigned Q16.16.
   - The scale of a projection output is (scale of its input vector) x (weight scale).
3. **Stage B (reductions), in the same pass as the raw-buffer write.**
   - absmax |x|, always;
   - sum of squares of the 24-bit-saturated raw values (RMSNorm);
   - running max and running sum of exponentials (softmax), rescaling the sum when the max grows.
   - The exponential is base 2: `2^(d*log2 e)`, with the fraction by linear interpolation (1+f). That is within about 6 % of exp and needs no table.
4. **Barrier.** When every announced tile has passed stage B, one scale is computed with a 64-bit restoring divider, plus an integer square root for RMSNorm:

   | mode    | element value q              | vector scale        |
   |---------|------------------------------|---------------------|
   | absmax  | round(127 x / absmax)        | absmax / 127        |
   | RMSNorm | round(127 x / absmax)        | absmax / (127 rms)  |
   | softmax | round(127 exp(x - max))      | 1 / (127 sum exp)   |

   - q x scale is therefore x, x/rms, or the softmax probability, and no element needs a division.
   - The quantizer multiplies by a reciprocal `127 * 2^40 / absmax`, held with 40 fraction bits.
5. **Quantize.** The raw buffer (1080 tiles, enough for the 8640-wide FFN) is read once more. One INT8 tile per cycle goes to the data buffer, and `v_done` is raised with the scale.

Tiles may arrive in any order: `t_idx` places them.

The scale path takes roughly 70 to 170 cycles. RMSNorm is the slowest, because it adds a mean-square division and a square root.

## Tile flow and credits

Each of the four arrays has:

- a two-entry output queue, which holds finished tiles (index, lane mask, eight 32-bit sums);
- a credit counter initialised to 2.

The flow works like this:

- A core may start a tile only if its counter is non-zero. Starting a tile *takes* a credit, and the tile leaving the queue *gives* it back.
- A lowest-index arbiter forwards queue heads to the nonlinear unit, one tile per cycle.
- While the attention engine owns the unit, only the BoothFlex queue is eligible.
- If a TINT tile finishes while the unit serves a softmax or SV vector, it waits in its queue.
- With both credits of a core used, the dispatcher stalls. This is counted in `perf_stall`.

At the full BitNet-3B shape a tile takes 400 or more cycles, and stalls do not occur. With short reductions (model width 32) they do, as the top-level test shows.

## Top-level interface (`vitallm_top`)

| group | signals | notes |
|-------|---------|-------|
| command | `start`, `busy`, `done` | one decoder layer, one token |
| shape | `n_heads`, `hc` (head dim/8), `dc` (model dim/8), `fc` (FFN dim/8), `n_tok` (cached tokens M), `k_sel` (K) | sampled at `start` |
| scales | `x_scale`, `w_scale`, `s_qk`, `s_sv` → `y_scale` | Q16.16; `s_qk` includes 1/sqrt(d) |
| buffer map | `bases[10]` = x, q (2·hc words), k, v, p, o (n_heads·hc), h, g, u, y | data-buffer word addresses (8 bytes each) |
| data load | `db_wr`, `db_wr_ready`, `db_wr_addr`, `db_wr_data` | quantizer writes win; retry when not ready |
| weight load | `wb_wr`, `wb_wr_bank`, `wb_wr_addr`, `wb_wr_data` (8x8 codes) | bank j feeds core j (3 = BoothFlex) |
| key features | `klo_in_valid/ready/data` | per head, per group of 8 tokens, `hc` words: [token][dim] of (nz, sign, LO) |
| KV cache | `kv_req_*`, `kv_rsp_*` | request: 8 token indices, chunk, K/V; response in order: [token][dim] INT8 |
| results | `q_out_valid/addr/data` | every quantized word as written (new K, V of each head, layer output) |
| counters | `perf_overlap`, `perf_stall`, `perf_bf_int8`, `perf_bf_tern`, `perf_kv_req`, `perf_mode_sw` | mechanism activity |

Memory at the default parameters is about 104 KB. Yosys counts 848,340 bits:

- weight banks 4 x 512 x 128 b;
- data buffer 4096 x 64 b;
- raw buffer 1080 x 264 b;
- K_LO FIFO 64 x 320 b;
- top-K score store.

The flip-flop logic is about 5,500 bits.

## Where this RTL departs from the paper, and what it leaves out

- **Off-chip parts.** DDR5, the DMA engine and clock/operand gating are not RTL here. Their places are the load ports, the K_LO stream and the KV request port.
- **Key features.** The K_LO features of cached keys are supplied from outside. The paper does not say where they are computed.
- **Leading-one width.** The architecture figure draws the ExpAdd inputs as 2-bit LO values, while the text defines LO = floor(log2|x|) for INT8. The RTL follows the text and uses 3 bits.
- **Top-K details.** The bin layout, the tie rule, and the two-pass collect-then-emit structure of the selector are choices of this design.
- **Head-output scales.** Each head's output is quantized with its own scale, but the O projection dequantizes the concatenated vector with the last head's scale. An exact design would rescale heads to a common scale.
- **FFN.** The gated FFN product (ReLU² of gate x up) and the residual additions are not modelled. The gate projection is computed, and the down projection consumes the up projection output. RMSNorm has no learned gain.
- **Current token's K/V.** They leave through `q_out`. Appending them to the off-chip cache is the host's job.
- **Prefill.** Prefill runs as repeated decode commands. There is no multi-token batching.
- **Number formats.** The formats, the base-2 exponential, the sequential divider and square root, the buffer sizes, the credit depth and the arbitration are this design's own. The paper gives none of them.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a watchdog. References are computed in the testbench independently, mostly with plain integer or real arithmetic.

| testbench | what it compares |
|-----------|------------------|
| `tb_tint_core` | tiles against integer dot products; output one cycle after `last` |
| `tb_boothflex_core` | INT8 and ternary tiles against products; 5 cycles per INT8 chunk, 1 per ternary chunk |
| `tb_lop_core` | scores against Eq.-style LO sums with an independent leading-one function |
| `tb_topk_selector` | kept set against a sort by (bin, index); emission time |
| `tb_nonlinear_unit` | absmax, RMSNorm and softmax against real-valued math; one tile per cycle in and out |
| `tb_weight_buffer`, `tb_data_buffer`, `tb_klo_cache`, `tb_credit_counter` | storage and flow control against shadow models |
| `tb_tile_dispatcher` | complete ternary mat-vec jobs on real TINT/BoothFlex cores; credits, stalls, job time |
| `tb_attention_engine` | one head with real LOP, top-K, BoothFlex and nonlinear unit; kept set, KV block count, output against float attention |
| `tb_head_scheduler` | job order, bases, weight pointer, scale chain, one-head offset |
| `tb_vitallm_top` | full BitNet b1.58 3B layer at default parameters |
| `tb_vitallm_prefill` | prefill: full-width layers at prompt positions with 8, 32 and 64 cached tokens |

`tb_vitallm_top` uses 32 heads, head dim 100, model dim 3200, FFN 8640, 2048 cached tokens and K = 32. It checks:

- every projection vector (±1 LSB);
- every head's kept set against the reference top-K;
- every head's output against float softmax attention (±6 LSB);
- the mechanism counters;
- the layer time.

A second, small layer exercises credit stalls. The full layer takes 595,475 cycles. That is 64.6 tokens/s for a 26-layer model at 1 GHz, without DRAM stalls, against the paper's 72.46 tokens/s.

To simulate a block with Verilator, compile the package first:

```
verilator --binary --timing --assert -Wno-fatal rtl/vita_pkg.sv $(ls rtl/*.sv | grep -v vita_pkg) \
          tb/tb_vitallm_top.sv --top-module tb_vitallm_top -Mdir obj
./obj/Vtb_vitallm_top
```

The full-size run takes about 15 seconds.

`tb_vitallm_prefill` runs full-width layers for prompt positions with M = 8 (fewer tokens than K, so all are kept), 32 and 64 cached tokens, with the same checks. A layer then takes about 577,000 cycles, since the LOP pass over a short cache is short. That gives 64 x 26 x 577,372 cycles = 0.96 s for a 64-token prompt at 1 GHz, against the paper's 0.88 s.
