# In-storage token scoring for hierarchical KV-cache eviction

Long-context LLM inference on a desktop machine runs out of memory because of
the KV cache. It grows linearly with context length and soon exceeds GPU VRAM
plus host DRAM. Eviction schemes keep only the most important ~10–20 % of past
tokens for attention. But they have to re-rank *all* past tokens at every
decoding step against the new query. When most of the cache lives on an SSD,
that ranking drags the whole key cache across PCIe at every step.

The HillInfer system moves the ranking into the storage device. It uses a
computational SSD (a Samsung SmartSSD: NAND, 4 GB DRAM and a Xilinx UltraScale+
FPGA behind an internal PCIe switch). The KV cache is split into two pools:

* a **hot pool** in host DRAM. It holds recent tokens and tokens that were
  often important before. The host CPU scores this pool.
* a **cold pool** on the SSD. The FPGA scores it next to the data.

For each decoding step the host sends the query vector down. Both sides score
their tokens at the same time. The FPGA returns only small **Score Blocks** of
`<token position, score>` pairs. The host merges all scores, picks the top
tokens and fetches only those KV rows. Balancing the two pools, tracking hit
rates and moving tokens between hot and cold pools are host software.

This repository holds RTL for the piece of that system that is hardware: the
**token-importance evaluation kernel** on the SSD's FPGA. The published system
implements that kernel in HLS C++. This is an RTL reconstruction from its
description. Where the description is silent, the choices made here are marked
as such below.

## What the kernel computes

For a cold-pool token *t* with key vector **k**ₜ (length *d*, FP16) and the
current query **q**:

    score(t) = Σᵢ  cast(qᵢ) · cast(kₜ,ᵢ)          (integer arithmetic)

Three simplifications make this fit a small FPGA. All three are part of the
published design:

1. **Raw inner product only.** Attention weights are
   softmax(**q**·**K**ᵀ/√d). Softmax and the 1/√d scale are monotone, and
   eviction needs only a ranking. So the kernel has no exponentials, no
   dividers and no normalisation.
2. **Low-precision scoring.** Keys stay FP16 in storage. Each element is cast
   to INT8 (or INT4) as it streams past, and the query is cast the same way.
   The KV rows that are later sent to the GPU are the original FP16 data, so
   the cast affects only the ranking.
3. **Query pinned on chip, keys streamed.** The query is written into block
   RAM once per request. The *N × d* key matrix flows through a fully unrolled,
   pipelined adder tree at one beat per cycle.

Scores leave the chip in chunks. After every *n* tokens the kernel closes a
Score Block and streams it to the host, then keeps scoring without a pause.
The host can therefore merge and sort while the FPGA is still working.

## Block diagram

```
 host: query beats ──► query_buffer (BRAM, INT8/INT4 on write)
                              │ 1 beat / cycle
 DRAM ◄── key_fetch (one read per slot)
   │
   └─ row beats ─► row parser ─► S1 key reg ─► dot_product_unit ─► token_accumulator
                  (header: pos)               cast · mult · adder tree   (d/LANES beats)
                                                                             │
 host ◄── Score Blocks ◄── score_block_packer ◄── tuple reg ◄── int_to_fp16 ◄┘
          (512-bit beats)  (ping-pong, n tuples)
                 eval_ctrl: start / flush / done      one global stall enable

 host: selected slots ─► kv_gather ──► DRAM (K row, then V row per slot)
 host ◄── FP16 K/V rows ◄── output reg ◄──┘   (shares the DRAM port; never
                                               runs while scoring is busy)
```

| module | role |
|---|---|
| `hill_eval_kernel` | top: wires the blocks, row parser, global stall, status counters |
| `query_buffer` | BRAM of D_MAX/LANES words × LANES signed bytes; casts on write; synchronous read with enable |
| `fp16_quant` | FP16 → INT8/INT4 cast (combinational) |
| `dot_product_unit` | LANES casts + LANES multipliers + `adder_tree` |
| `adder_tree` | fully unrolled binary tree, one register per level |
| `token_accumulator` | sums the d/LANES partial products of a row into a 32-bit score |
| `int_to_fp16` | 32-bit raw score → FP16 (monotone) |
| `score_block_packer` | two n-tuple buffers, 512-bit output beats, pads the last block |
| `key_fetch` | one read request per cold-pool slot |
| `eval_ctrl` | request state machine: IDLE → RUN → FLUSH → DRAIN |
| `kv_gather` | returns the original FP16 K and V rows of the host-selected slots |
| `hill_pkg` | shared types: `req_cfg_t`, `tuple_t`, `prec_e`, default sizes |

## Data formats

**Beat.** 512 bits = `LANES` = 32 FP16 elements. Element *i* is in bits
`16i+15 : 16i`.

**Cold-pool row in on-board DRAM** (this design's layout). One header beat
followed by `dim_beats` key beats. The token position is in bits 15:0 of the
header. The row stride is `(dim_beats+1) × 64` bytes. The published
description says the Score Block carries the token position. It does not say
how the FPGA learns it. A header per row keeps the position next to the key.
Tokens can then be promoted or demoted by rewriting rows, without an on-chip
table. The cost is one beat per row (0.8 % at *d* = 4096).

**Tuple.** 32 bits: `{score[15:0] (FP16), pos[15:0]}`. This gives the 4 bytes
per token that the design quotes for a Score Block.

**Score Block.** *n* = `BLOCK_TOKENS` = 64 tuples, sent as 4 beats of 16
tuples. `sb_last` marks the fourth beat. The last block of a request may be
partly filled. Its empty slots read `pos = 0xFFFF`, `score = 0xFC00` (−∞). So
valid positions run from 0 to 65534.

**Request configuration** (`req_cfg_t`, latched at `start`):

| field | meaning |
|---|---|
| `key_base` | byte address of slot 0 |
| `num_slots` | cold-pool tokens to score (0 … 2¹⁷−1) |
| `dim_beats` | *d* / LANES, 1 … D_MAX/LANES |
| `prec` | `PREC_INT8` or `PREC_INT4` |
| `k_shift` | key cast scale, signed: q = round(k · 2^k_shift) |
| `score_shift` | FP16 score = raw · 2^−score_shift |

The query has its own `q_shift` and `q_prec`, given on the write port. The host
must write the query with the same precision as the request.

**Returning the selected KV.** Once the host has ranked both pools, it pulses
`g_start` with `g_key_base`, `g_val_base` and `g_dim_beats`. It then sends the
selected cold-pool slot numbers on `id_valid/id_ready/id_slot`, with `id_last`
on the final one. The value pool uses the same row layout as the key pool. For
each slot the kernel reads the key row, then the value row, and forwards every
beat unchanged on `kv_*`, header beats included, so each row names its token.
`kv_last` marks the last beat of the last value row, and `g_done` pulses once
that beat has been accepted. Scoring and return share the DRAM read port:
`start` is ignored while `g_busy` is high, and `g_start` while `busy` is high.

## Arithmetic choices

The published description says only "INT8/INT4, cast on the fly". The rules
below are this design's choices:

* **Cast** (`fp16_quant`): multiply by a power of two, round half away from
  zero, then saturate symmetrically to ±127 (INT8) or ±7 (INT4). ±Inf
  saturates and NaN gives 0. The power-of-two scale needs no multiplier. The
  host chooses `k_shift`/`q_shift` from the value range it knows.
* **Products** are 8 × 8 → 16 bits in both modes. The adder tree widens by one
  bit per level: 21 bits for 32 lanes. The accumulator is 32 bits, enough for
  5120 × 127² (< 2²⁷).
* **Score conversion** (`int_to_fp16`): truncation toward zero, saturation to
  ±65504 (0x7BFF), and subnormals kept. Both truncation and saturation are
  monotone, so the FP16 ranking never reverses the integer ranking. Ties can
  appear: among saturated scores, or between integers closer together than
  the FP16 spacing. Choose `score_shift` so that typical scores stay below
  65504. For example, with *d* = 4096 and INT8, a shift of about 8 to 12.

## Timing

* **Throughput.** One key beat per cycle. A token costs `dim_beats + 1`
  cycles (the extra cycle is the header): 129 cycles at *d* = 4096 and 161 at
  *d* = 5120. No clock rate is given for the published kernel. At an assumed
  250 MHz, a 36K-token cold pool at *d* = 4096 takes about 18.6 ms per layer
  and sequence.
* **Latency** from a row's last beat to its tuple: S1 (1) + multipliers (1) +
  adder tree (log₂ LANES = 5) + accumulator (1) + tuple register (1) = 9
  cycles. Add 1 cycle into the packer, then the block drains.
* **Request.** The time from `start` to `done` is `N·(dim_beats+1)` plus a
  small constant. The constant is below 64 cycles at full size; the full-size
  test measures 258,018 cycles for 2000 tokens at *d* = 4096. `done` comes only
  after the last Score Block has been accepted by the host.
* **Stalls.** The datapath has a single advance signal:
  `en = !(tuple waiting && packer full)`. The packer is full only when both of
  its block buffers are waiting for the host. Then every stage holds, and
  `mem_rd_ready` drops. A gap in the DRAM data stream needs no stall: it simply
  becomes a bubble that travels down the pipeline. `stat_hold_cycles` counts
  the cycles lost to output backpressure.

The query buffer is read with `rd_en = en`. The BRAM output therefore stays
aligned with the S1 key register through a stall.

## Using the kernel

1. Write the query: `dim_beats` beats on `q_wr_en/q_wr_addr/q_wr_data`, with
   `q_shift`, `q_prec`.
2. Pulse `start` with `cfg` valid (only while `busy` is low).
3. Serve `mem_req_*` (address, length in beats) and return the row beats
   in order on `mem_rd_*`. Requests go out back to back.
4. Accept Score Block beats on `sb_*` until `done` pulses.
   `stat_tokens` = `num_slots`.
5. After selection, fetch the chosen cold-pool rows in FP16 through the
   `g_*`, `id_*` and `kv_*` ports (see "Returning the selected KV").

For batch > 1 or several layers, issue one request per sequence and layer. The
host merges the tuples with the scores of its own pool and selects the top
α·N tokens.

## Parameters

| parameter | default | source |
|---|---|---|
| `LANES` | 32 (512-bit beat) | this design: typical UltraScale+ memory port width |
| `D_MAX` | 5120 | this design: largest hidden size among the evaluated models (LLaMA-13B); no *d* is published |
| `BLOCK_TOKENS` (*n*) | 64 | this design: *n* is not published |

`LANES` must be even. `D_MAX` must be a multiple of `LANES`. `BLOCK_TOKENS`
must be a multiple of `LANES/2`. *d* is taken as the full hidden size: the
ranking is per token, across all heads, and that sum over heads equals the
inner product of the concatenated vectors.

## Evaluated configurations

Each request covers one sequence and one layer. The limits are: *d* ≤ 5120,
positions < 65535, slots < 2¹⁷. Every configuration in the published
evaluation falls inside them:

| workload | *d* | tokens |
|---|---|---|
| LongBench, 7B models, up to 36K context | 4096 | ≤ 36K |
| LongBench, LLaMA-13B | 5120 | ≤ 36K |
| OPT-6.7B, 1920 + 128 tokens, batch 1–25 | 4096 | 2048 |
| few-shot accuracy tasks and PG-19 profiling | ≤ 5120 | a few hundred to a few thousand |

All hidden sizes come from the public model configurations; the published
work does not state them.

## Where this departs from, or goes beyond, the published design

* **INT4 saves no logic here.** The published design says low precision
  "halves resource consumption". In this RTL, INT4 is a mode of the same 8-bit
  multipliers (values are clamped to ±7), so the area does not change.
  Packing two INT4 products per multiplier, or building an INT4-only
  instance, would recover the saving.
* The query is cast when it is written, not while it is read.
* Scores leave as FP16, as the published overhead figures imply. The
  conversion rule is this design's.
* The row header, the ping-pong packer, the block padding and all handshakes
  are this design's.
* The KV return path reads K and V rows of the selected slots in that
  order and keeps each row's header; the published design says only that the
  original FP16 tensors of the selected tokens are sent back.
* **Not built.** Everything on the host (hot-pool scoring, merging, top-k, hit-rate table, promotion and
  demotion, the pool-ratio model), the GPU, the SSD's DRAM/NAND/controller and
  the PCIe/DMA path. The kernel offers plain valid/ready ports where these
  connect.

## Verification

Each module has a self-checking testbench in `tb/`. Its name is the module
name prefixed with `tb_`. Each prints `TB_RESULT checks=N failures=M`.

The reference values come from `tb/tb_ref_pkg.sv`. That package recomputes the
cast and the FP16 conversion with real arithmetic, not with the RTL's
bit-shifting. Test data is generated from a hash of (slot, beat, lane), so no
data files are needed.

* Unit tests use random data, random stalls and random backpressure. Where a
  latency is fixed, they check it.
* `tb_hill_eval_kernel` runs the whole kernel at reduced size (8 lanes,
  *d* ≤ 64, 16-token blocks). It runs 26 requests. It checks every tuple and
  every pad slot, and it checks the one-beat-per-cycle rate. It counts each
  mechanism and fails if any never occurred: INT8 and INT4 requests, DRAM
  gaps, output holds, padded and full blocks, saturating casts, saturating
  scores, an empty request, and KV returns. After every other request it
  plays the host's selection: it takes the best-scoring slots, sends them
  down the id stream, and checks every returned K and V beat.
* `tb_hill_full` runs the kernel at its default parameters. It scores 2000
  tokens at *d* = 4096 (INT8) and checks the rate. It then runs a *d* = 5120
  INT4 request under DRAM gaps and a long output stall, a request with
  saturating scores, and an empty request. It also returns the KV rows of the
  8 best-scoring tokens of the 2000-token request. It runs in a few seconds.
* `tb_hill_longctx` runs the largest evaluated case at the default size: a
  36,864-token cold pool at *d* = 5120. It checks all tuples and the rate
  (5,935,121 cycles, one per beat plus a small constant). It then returns
  and checks the FP16 K and V rows of the 32 best tokens. It runs in under a
  minute.

Build and run a test with Verilator 5, for example:

    verilator --binary --timing --assert -y rtl -y tb rtl/hill_pkg.sv \
        tb/tb_ref_pkg.sv tb/tb_hill_full.sv --top-module tb_hill_full
    ./obj_dir/Vtb_hill_full

Lint a module with `verilator --lint-only -Wall -y rtl rtl/hill_pkg.sv
rtl/<module>.sv`. Several modules hold SystemVerilog assertions for their
interface rules: the packer's flush and output stability, the controller's
tuple accounting, the kernel's `dim_beats` range and single user of the DRAM
port, and the KV return's request-before-data rule. Their `disable iff
(!rst_n)` triggers Verilator's SYNCASYNCNET lint note. That note is expected:
the reset is used asynchronously in the logic and only as a disable in the
assertions.
