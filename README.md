# ORBIS token matcher in SystemVerilog

Video diffusion transformers spend most of their time in attention over
tens of thousands of spatio-temporal tokens, and many of those tokens are
near-copies of each other. ORBIS accelerates such models by running the
attention of some timesteps on fewer queries: the query of a token that
closely resembles another is dropped before attention, and afterwards the
token gets a copy of its partner's result (keys and values stay complete). The pairs are found from the attention *output*
of an earlier, fully computed timestep, which predicts the similarity of
the next outputs much better than the inputs do. The pairs are found by
distribution-aware token matching (DATM), a small k-means-like clustering
on 4-bit quantized activations, and are then reused for a few reduced
timesteps.

This repository holds RTL for the part of the accelerator that finds those
pairs: a quantization engine (QE) and a DATM engine, joined in `orbis_top`.
The diffusion engine that runs the transformer itself (a systolic array and
a vector unit), the on-chip global memory and the DRAM are not included.
Attention outputs enter `orbis_top` on ports, and the pairs leave on a
valid/ready port.

## The matching problem

Take N tokens `X[0..N-1]` of D channels each. The engine:

1. **Initialises** by drawing K distinct tokens as *destinations* (dst). The
   other N-K tokens are *sources* (src).
2. **Pairs** every src with its nearest dst and records that distance.
3. **Checks convergence**. The loss is the mean of the nearest distances.
   The engine stops when the previous loss minus the current one falls below
   a threshold `eps`.
4. **Updates** each dst. It averages the tokens paired with that dst, and
   the token nearest to the average becomes the new dst. Then it returns to
   step 2.
5. **Selects the top-k**. The fraction `r` of (dst, src) pairs with the
   smallest distance is kept.

In every kept pair, the src query is dropped before attention, and the
dst's result is copied to the src afterwards.

All distances are taken on 4-bit channel-wise quantized codes:

    dist(a, b) = sum over channels c of ( s_c * (q_a[c] - q_b[c]) )^2

Here `q` are signed codes in -7..7 and `s_c` is the scale of channel c.

## Number formats

| Quantity | Format |
|---|---|
| activations in | signed 16-bit integer (`ACT_W`) |
| scale `s_c` | 16-bit, the channel's largest magnitude `max_n \|x[n][c]\|` |
| code | signed 4-bit, `sign(x) * min(7, round(\|x\| * 7 / s_c))` |
| reciprocal | `floor(2^24 / d)`, 25 bits (`RECIP_P = 24`) |
| distance, loss, eps | 64-bit unsigned |
| ratio r | `cfg_ratio / 2^16` |

The actual step of the code is `s_c / 7`. Because the factor 1/7 is the same
for every channel, it is left out of the scale. Every distance is therefore
49 times the "true" one, and no decision changes. Rounding is done with
integers only:

    q = sign * min(7, (|x| * 7 * floor(2^24/s) + 2^23) >> 24)

Using a fixed-point reciprocal in place of a divider can shift a code by one
step when `|x|*7/s` lies very close to a half. The testbench reference model
uses the same formula, so it predicts these cases bit for bit.

## Quantization engine (`quant_engine`)

The QE works in three passes over one layer's output:

- **Scale pass (channel-major).** Each beat carries `TREE_N = 8` activations
  of one channel (`a_ch`), from eight tokens.
  - The `max_tree` (eight magnitudes, then 4-2-1 comparators, 3 cycles)
    reduces them.
  - A running maximum spans the beats from `a_first` to `a_last`.
  - On `a_last`, the channel's maximum goes into the QE scratchpad.
- **Reciprocal pass.** `r_start` walks all D channels through `recip_unit`, a
  bit-serial restoring divider taking 26 cycles per channel.
  - Each reciprocal is stored.
  - Every LANES channels, one scale word is sent out on `s_*`. In `orbis_top`,
    these words go straight into the DATM engine's scale memory.
  - `r_done` pulses at the end.
- **Quantize pass (token-major).** Each beat carries `LANES = 4` channels of
  one token.
  - Each channel is multiplied by its reciprocal, rounded and clamped.
  - Two cycles later the codes leave on `q_*` and are written into the DATM
    engine's token memory.

The activations are not stored in the QE: they are streamed twice, once per
layout. The scratchpad holds only `D` maxima and `D` reciprocals.

## DATM engine (`datm_engine`)

### Storage

All storage is on-chip arrays with synchronous reads. Sizes are set by
`N_MAX`, `K_MAX` and `D`, and the bank split lets NB units be fed in one
cycle.

| Array | Contents | Organisation |
|---|---|---|
| `qmem` | codes of all tokens | NB banks; token n in bank n % NB; one LANES-channel group per word |
| `dmem` | copies of the current dst codes | NB banks; slot k in bank k % NB |
| `smem` | the scale words | one word per channel group |
| `summem` | per-cluster code sums | used in the update |
| flop arrays | per token: is-dst flag, nearest dst and its distance; per dst: token index, member count | |

### Distance datapath

There are `NB = 8` distance accumulation units (`dau`). Each unit handles
LANES channels per cycle in four pipeline stages:

1. subtract the codes, then multiply by the channel scale;
2. square;
3. add across lanes;
4. add into an accumulator that `in_first` clears.

A `min_tree` with 8 inputs takes the NB results and returns the smallest
distance with its position. Ties go to the lower position, and masked
inputs are ignored. A result stage keeps the best candidate across
successive groups of NB.

A tag pipeline of `1 + 4 + log2(NB)` stages runs alongside the datapath. It
carries the source index, the candidate group and a last-group flag. The
controller can therefore issue one channel group per cycle without waiting
for results.

### Phases and timing

The same datapath serves two searches.

- **Pairing.** One src is broadcast to all units. Each unit holds a
  different dst from `dmem`. A src costs `ceil(K/NB) * D/LANES` cycles,
  plus a pipeline drain at the end of a pass.
  - For each src, the nearest dst and its distance are recorded.
  - The distance is also added to the loss sum, and the src's codes are
    added into its cluster's entry in `summem`.
  - A src that ties between two dsts goes to the one with the lower slot
    index.
- **Convergence.** `loss = (loss_sum * floor(2^24/#src)) >> 24`.
  - The engine stops when `prev_loss - loss < eps`. The comparison is
    signed, so a loss that rises also stops the loop.
  - The engine never stops on the first pass.
  - `cfg_max_iter` bounds the number of pairing passes.
- **Update.** Each cluster's mean is computed group by group, on the fly,
  as `sign * min(7, round(|sum| * floor(2^24/count) / 2^24))`.
  - The mean is then broadcast to the units as the query. The candidates are
    all N tokens, NB consecutive tokens per group.
  - The nearest token becomes the new dst. This costs
    `ceil(N/NB) * D/LANES` cycles per dst.
  - A dst with no members keeps its token.
  - `dmem` is then rebuilt from `qmem`.
- **Top-k.** Every (distance, src, dst) word is appended to `topk_unit`.
  - The unit keeps `floor(#src * cfg_ratio / 2^16)` of them and streams the
    pairs out smallest first.
  - `done` pulses after the last pair.

As an example, with the defaults and N = 1024, K = 256, one pairing pass
takes about 768 × 32 × 768 ≈ 18.9 M cycles.

### Initial dst choice

A 16-bit Galois LFSR (taps 0xB400) is seeded by `cfg_seed`. The engine
draws values from it, masks them to the next power of two above N, and
rejects any value that is out of range or already chosen, until K distinct
tokens are marked.

## Top-k (`topk_unit`, `bitonic_sorter`)

The list holds up to `N_MAX - K` words, far more than a practical sorting
network can take at once. Sorting therefore has two phases:

1. **Block sort.** Blocks of `SORT_N = 16` words stream through a pipelined
   bitonic network, one block per cycle. The network has 10 comparator
   columns, each registered.
2. **Merge.** A single comparator merges the sorted runs pass by pass
   between two ping-pong buffers, at one word per cycle.

The sort key is the whole word `{distance, src, dst}`, so equal distances
are ordered by src index. The output is fully deterministic.

## Departures from the paper and open points

- **Who quantizes.** The text has the QE use the diffusion engine's vector
  unit to quantize, while the block diagram draws a multiplier inside the
  QE. Here the QE has its own multipliers.
- **Problem size.**
  - The engine matches one problem of up to `N_MAX = 1024` tokens held on
    chip.
  - The evaluated videos have about 17.5k tokens per layer (CogVideoX,
    49 frames at 480×720) and about 67k tokens (HunyuanVideo, 129 frames
    at 544×960). These counts are derived from the models' latent and
    patch sizes.
  - The paper does not say how a layer of that size is tiled, or streamed
    from global memory, into the engine. The arrays grow with `N_MAX`, but
    the flop arrays per token make large values costly.
- **Parameter sizes.**
  - `NB = 8` and `TREE_N = 8` are read from the drawn trees (three comparator
    levels).
  - `LANES = 4` is read from the four scale inputs drawn in a DAU.
  - `D = 3072` is the hidden size of both evaluated models.
  - All other sizes are choices of this design.
- **Convergence details.** The loss scaling, the signed stop test, the
  iteration cap, and the handling of empty clusters and of duplicate dsts
  are not specified in the paper.
- **How the update works.** The paper assigns the update to "vector units".
  Here the mean is computed by add, reciprocal, multiply and clamp steps.
  The nearest-token search reuses the DAU/min-tree datapath.
- **Clock and area.** The published design targets 1 GHz in a
  28 nm process, with the QE and DATM engine taking under 3% of the chip
  area. This RTL has not been timed or sized against either figure.
- **Not built.** The systolic array, the vector unit, the global memory,
  the external memory, and the reduce/restore steps of the reduced
  timesteps are absent.

## Simulating

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`. `tb/datm_ref_pkg.sv` is an independent
reference model of the whole algorithm, written with the same integer
formulas. The engine, top and full-size testbenches compare each output pair
with it, as well as the iteration count and the loss.

With plain Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_datm_engine \
        -y rtl -y tb +libext+.sv rtl/orbis_pkg.sv tb/datm_ref_pkg.sv tb/tb_datm_engine.sv
    ./obj_dir/Vtb_datm_engine

| Testbench | What it covers |
|---|---|
| `tb_max_tree`, `tb_min_tree`, `tb_dau`, `tb_recip_unit`, `tb_bitonic_sorter` | datapath units, including latency |
| `tb_topk_unit` | random lists, ties, partial blocks, back-pressure |
| `tb_quant_engine` | all three passes against a software quantizer |
| `tb_datm_engine` | several runs with both stop conditions (eps, cap) |
| `tb_orbis_top` | end to end at reduced sizes. It counts the mechanisms: dst update, eps stop, iteration-cap stop, empty cluster, top-k truncation, merge passes, output stall |
| `tb_orbis_top_full` | end to end with every default (D = 3072, 1024/512-token memories), matching 96 tokens to 12 dsts. About 1.1 M cycles, a few seconds |
