# A hybrid ReRAM / SRAM in-memory accelerator for transformer attention

Transformer layers contain two very different kinds of matrix-vector
products. Generating Query, Key and Value from a token multiplies by weights
that never change after training. Attention itself, `Q·Kᵀ` and then
`softmax(·)·V`, multiplies two operands that are both new for every input
sequence. Dense non-volatile crossbars (ReRAM) suit the first kind well: the
weights are programmed once and then used in place. They suit the second kind
badly, because rewriting them for every sequence is slow, costs a lot of
energy and wears out the cells.

This RTL implements the split proposed for the X-Former accelerator (Sridharan
et al., "X-Former: In-Memory Acceleration of Transformers"):

* a **Projection Engine** of ReRAM crossbar cores holds all static weights and
  produces Q, K and V, one token at a time;
* an **Attention Engine** of CMOS 8T-SRAM compute-in-memory tiles (AHCTs,
  attention head compute tiles) is rewritten with the dynamic operands of
  every sequence and computes multi-head attention;
* a **sequence-blocking dataflow** cuts the sequence into blocks of SB = 64
  tokens. Attention can start as soon as the first block has been projected,
  so both engines work at the same time. Intermediate scores never exceed
  SB × SB, whatever the sequence length.

The SystemVerilog covers one complete attention layer: embedding lookup,
Q/K/V projection, multi-head attention with softmax, and head merging. It
compiles with Verilator and with slang, and every block has a self-checking
testbench. Analog parts (crossbar MAC, DACs, ADCs, SRAM bit-line compute) are
behavioural models with the ports of the real parts. Everything else is
synthesizable RTL.

## Block map

```
xformer_top
├── projection_engine            Q/K/V generation (MVMStatic)
│   ├── embedding_rom            read-only table, token id -> 768-byte vector
│   └── nvm_core × 288           36 tiles × 8 cores
│       └── reram_crossbar × 6   128×128 2-bit cells, 1-bit DACs, 2 shared 8-bit ADCs  [behavioural]
└── attention_engine             attention (MVMDynamic)
    ├── attn_input_buffer        transposable Q/K/V store for the whole sequence
    ├── global_attention_scheduler
    └── ahct × 32                2 PEs × 16 tiles, one attention head each
        ├── ahct_bank × 8        4 Query banks + 4 Value banks
        │   └── sram_imc_macro   64×128 8T-SRAM compute macro              [behavioural]
        ├── sfu                  16 vector units × 4 lanes
        │   └── vector_unit × 16
        └── block_seq_accumulator
```

`xformer_pkg` holds the shared sizes, the two enums (`vu_op_t`, `rd_mode_t`)
and the exponential function `exp2_q`.

| Size | Value | Origin |
|---|---|---|
| Crossbar | 128 × 128, 2-bit ReRAM cells, 1-bit DAC, 2 ADCs of 8 bit | published configuration |
| Projection Engine | 36 tiles × 8 cores × 6 crossbars | published configuration |
| Attention Engine | 2 × 16 AHCTs, 8 banks each, SFU of 16 VUs × 4 lanes | published configuration |
| Model | hidden size 768, 64 per head (BERT-base), 8-bit W/Q/K/V | published configuration |
| Sequence block | SB = 64 | published configuration |
| Longest sequence | 512 tokens | longest evaluated sequence |
| Vocabulary | 30522 | BERT word-piece vocabulary (own choice) |
| Requantisation shift | 17 | own choice |

## Number formats

All operands are **unsigned 8-bit** integers. The published design only says
"8-bit fixed point" and nothing about sign. Negative weights or activations
would need offset encoding or differential columns, and that is left out.
The widths that follow from this choice:

* crossbar core sum: 24 bits (128 rows × 255 × 255);
* projection sum over 768 inputs: 26 bits, then `min(sum >> 17, 255)` gives the
  8-bit Q, K or V value;
* attention score `s = q·k` over 64 dimensions: 22 bits;
* softmax weight `e = exp2_q(s)`: 16 bits;
* numerator `Σ e·v` and denominator `Σ e` over up to 512 keys: 32 bits;
* attention output: `min(⌊Σ e·v / Σ e⌋, 255)`, 8 bits. Because this is a
  weighted mean of 8-bit values, it never actually saturates.

### The exponential

Softmax needs `exp`. The vector units compute a base-2 exponential on a scaled
score instead:

```
x     = min(s >> 17, 31)                       -- 5 bits, read as 3.2 fixed point
e     = FRAC[x mod 4] << (x div 4)             -- FRAC = {128, 152, 181, 215} = round(128·2^(f/4))
```

So `e ≈ 128 · 2^(s / 2^19)`, which is a softmax with temperature `2^19 / ln 2`
on the raw integer score. The scaling clips at `x = 31`. This approximation
is this design's own choice; the published design names exponentiation as an
SFU operation but does not say how it is done. To change the temperature,
change `SCORE_SHIFT` in `xformer_pkg`.

## Projection Engine

### One core: bit slicing and bit streaming

A crossbar cell holds only 2 bits, so one 8-bit weight `w[r][k]` occupies
four adjacent columns. Column `4k+s` holds bits `[2s+1:2s]`. A crossbar
therefore stores a 128 × 32 block of weights, and the six crossbars of a core
store a 128 × 192 block. `prog_data[8k +: 8]` of a programmed row is simply
weight `k`.

The input vector (128 × 8 bit) is latched in the input register. It is then
streamed **one bit-plane at a time** through the 1-bit DACs, LSB first. For
each bit-plane `b`, the two ADCs of a crossbar walk its 128 columns, two
columns per cycle. Each conversion returns

```
c = Σ_r x[r][b] · cell[r][4k+s]      (0 … 384, saturated to 255 by the 8-bit ADC)
```

and the shift-and-add logic adds `c << (b + 2s)` into output `k`. The two
columns converted together always belong to the same weight, so their two
shifted values are summed before the add. One MVM therefore takes 8 × 64
steps. `start` to `done` is **513 cycles**.

ADC saturation is real here. A column whose active cells add up to more
than 255 loses the excess. With random 8-bit data this is rare (the mean
column sum is about 96). The testbenches check both the saturating behaviour
and exact results for data that stays within range.

### Spreading a layer over cores

A layer's Q, K and V weights form a 768 × 2304 matrix. It is cut into
`RB = 768/128 = 6` row blocks and `CB = 2304/192 = 12` column blocks, giving
72 cores. Core `layer·72 + rb·12 + cb` holds block `(rb, cb)`. Output `o` of
the projection comes from column block `o / 192`. Outputs `0…767` are Q,
`768…1535` are K and `1536…2303` are V. The 288 cores hold **four layers**.

For one token the projection controller:

1. looks the token up in the embedding table;
2. writes the result into the shared-memory input buffer;
3. starts all 72 cores of the selected layer at once, each on its own
   128-entry slice (weight stationary, fully parallel);
4. adds the six row-block partial sums and requantises them into the output
   buffer;
5. offers the Q/K/V vector on `qkv_valid` and holds it until `qkv_ready`.

From token accepted to `qkv_valid` takes **518 cycles**.

## Attention Engine

This is the least obvious part of the design.

### What a tile stores

One AHCT handles one head (64 dimensions) for one **query block** of 64
tokens at a time. Its eight banks are each a 64-row × 128-column SRAM macro,
with shift-and-add logic and 16 accumulators:

| Banks | Row = | Columns = | Used for |
|---|---|---|---|
| Query banks 0–3 | head dimension `d` (64) | 16 queries × 8 bits | `s[i][j] = Σ_d k_j[d] · q_i[d]` |
| Value banks 0–3 | key token `j` of the key block (64) | 16 dimensions × 8 bits | `num[i][d] += Σ_j e[i][j] · v_j[d]` |

In both cases the stored operand is bit-sliced across columns. The other
operand is bit-streamed on the rows: a key is streamed in 8 steps, a softmax
weight row in 16 steps. A macro column returns the count of rows where both
the input bit and the cell are 1. The bank's shift-and-add combines the
counts as `pop << (input bit + stored bit)`.

The Query banks hold Q **transposed** (one head dimension per row). The
attention input buffer is therefore transposable: a `RD_QT` read returns one
dimension of all 64 queries of a block, while `RD_K` / `RD_V` reads return a
token's row.

### One pass

The global scheduler runs **passes** `(qb, kb)`, one for each pair of query
block and key block, in query-major order. All tiles run every pass in
lockstep, each on its own head:

| Phase | What happens | Cycles |
|---|---|---|
| WQ (first pass of a query block only) | write Qᵀ of block `qb` into the Query banks | 65 |
| WV | write V of block `kb` into the Value banks | 65 |
| QK | for each of the 64 keys: read `k_j`, stream it into the Query banks, store the score column | 64 × 12 |
| SM | per score column: 64 SFU lanes form `e = exp2_q(s)`; add to the denominators | 64 × 2 |
| AV | per query: stream `e[i][·]` into the Value banks, add the 64 results to the numerators | 64 × 19 |
| NORM (last pass only) | per query: 64 lanes divide numerators by the denominator; emit the row | 64 × 10 |

A first pass takes 2244 cycles, a middle pass 2179 and a last pass 2819. A
pass that is both first and last takes 2884. The query block is written only
once and reused by every key block (Q stationary).

### Why blocking gives the exact softmax

Softmax over the full sequence needs the denominator `Σ_j e[i][j]` over all
keys. The **block sequence accumulator** keeps, for the 64 queries of the
current block, the running numerators `Σ_j e·v` and denominators `Σ_j e`
across all key blocks. Division happens only once, after the last key block.
The weights `e` use a fixed scale (no per-row maximum is subtracted), so
partial sums from different blocks add directly. The result is therefore
identical to computing the whole `SL × SL` score matrix at once. At no time
is more than one 64 × 64 score block stored.

### Overlap and stall

Tokens leave the Projection Engine in order, and the top counts finished
blocks (`blocks_ready`). A pass `(qb, kb)` may start only when
`blocks_ready > max(qb, kb)`. Until then the scheduler holds it and raises
`ae_stall`. So pass `(0, kb)` runs as soon as block `kb` is complete, while
the following blocks are still being projected. That is the overlap the
sequence-blocking dataflow is meant to give. By the time query block 0 has
seen every key block, the whole sequence is projected, and the remaining
query blocks run back to back without stalls.

With the schedule built here, the Projection Engine needs about 64 × 520
cycles per block (about 33 000). An attention pass needs about 2200 cycles.
The attention side therefore mostly waits: the projection of one token through 8 bit-planes
and 64 ADC steps per crossbar is the bottleneck of this implementation.

## Top-level interface and timing

| Port | Meaning |
|---|---|
| `w_prog_en/core/xbar/row/data` | program one crossbar row: 128 cells of 2 bits (= 32 weights × 8 bits) |
| `emb_prog_en/addr/data` | write one embedding entry |
| `start`, `nblocks`, `layer` | run one attention layer on `nblocks × 64` tokens with layer group `layer` (0–3) |
| `tok_valid/tok_ready/tok_id` | token stream from memory, valid/ready handshake |
| `out_valid/out_token/out_vec` | one output token: 768 bytes, heads merged, tokens in order |
| `pe_busy`, `ae_busy`, `ae_stall`, `done` | status; `done` pulses when the layer is complete |

Weights and embeddings are programmed once, before the first `start`.
Everything is synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset of the control state; memories are not reset.

## What is not built, and where it departs from the published design

* **Only the attention layer is sequenced.** The published design also runs
  the output projection and the feed-forward layers on the Projection Engine,
  and repeats the whole thing per encoder layer under an instruction-driven
  controller. This RTL does neither. The attention output is a top-level
  port, and the controller is a fixed state machine. Layer norm and residual
  additions are not described in enough detail to build.
* **Capacity.** The published core count (288 cores × 6 crossbars × 128 × 32
  weights = 7.08 M 8-bit weights) holds the Q/K/V weights of four BERT-base
  layers. That is far from the roughly 85 M weights of the whole BERT-base
  encoder that the design is said to store on chip. BERT-large (hidden size
  1024, 16 heads) needs `HS_P = 1024`: one layer then uses 128 cores and 16
  tiles.
* **Table entries that could not be used as given.** "6 8T-SRAM cells/bank"
  is read as unclear, and each bank is one 64 × 128 macro. The block sequence
  accumulator needs 16.5 KB per tile for exact sums, against 6 KB published.
  The attention input buffer holds a whole 512-token sequence (1.2 MB). The
  published design gives a 384 KB shared memory but no attention-buffer size.
* **Projection Engine memories.** The published design has a 384 KB shared
  memory and a 4 KB input/output scratchpad per core. Here the shared memory
  is a one-token input buffer and a one-token output buffer. Each core's
  input and output registers act as its scratchpads. The design does not
  say how either memory is organised or filled.
* **Only the blocked dataflow.** The unblocked schedule, where all
  projections finish before attention starts, is the baseline the blocked
  one is compared against, and it has no separate mode here. A sequence of a
  single block (`nblocks = 1`) runs the same way as that baseline: the
  engines do not overlap.
* **Own choices where the published design is silent:** unsigned operands;
  weight-to-core mapping; requantisation shift; ADC saturation; ideal
  (exact) SRAM column ADCs; the base-2 exponential; 8-bit restoring division;
  the pass order, phase schedule and readiness rule; all handshakes; reset.
* **Not modelled:** analog non-idealities (noise, IR drop, device variation),
  energy, and the engine-to-engine bus as a shared resource. The bus here is
  a point-to-point link that carries one token per cycle.
* **Not built:** the SFU multiplier. Softmax here does not need it, because
  the multiplication by V happens in the Value banks.

## Simulating

Every testbench in `tb/` is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_xformer_top \
    rtl/xformer_pkg.sv tb/tb_xformer_top.sv -y rtl -y tb
./obj_dir/Vtb_xformer_top
```

Any other testbench runs the same way with its own name. The build needs a
few GB of memory for `tb_xformer_top_full`.
```

| Testbench | What it runs |
|---|---|
| `tb_reram_crossbar`, `tb_sram_imc_macro` | analog models against independent column sums; crossbar ADC saturation; SRAM row rewrite |
| `tb_nvm_core` | 6-crossbar MVM against a slice-by-slice model and the exact product; 513-cycle latency |
| `tb_embedding_rom`, `tb_attn_input_buffer` | table and buffer reads, including transposed Q reads |
| `tb_projection_engine` | 8-core, hidden-size-128 engine: two layer groups, output saturation, output back-pressure, 518-cycle latency |
| `tb_ahct_bank`, `tb_vector_unit`, `tb_sfu`, `tb_block_seq_accumulator` | bank dot products, exp/add/divide lanes, accumulation across blocks |
| `tb_ahct` | one head over 128 tokens (2 blocks) against an independent softmax model; pass cycle counts; query-block reuse |
| `tb_global_attention_scheduler`, `tb_attention_engine` | pass order, readiness stalls, 2-head engine with random token arrival |
| `tb_xformer_top` | reduced whole chip (8 cores, 2 heads): two layers, 128- and 64-token sequences; counts stalls, engine overlap, query-block reuse and the layer switch |
| `tb_workload_seq` | same narrow chip with the full 512-token buffer: a 384-token and a 512-token sequence (36 and 64 attention passes), every output checked |
| `tb_xformer_top_full` | full default size (288 cores, 32 tiles, hidden 768): one 64-token block end to end, about 1.5 minutes |

The reference models in the testbenches compute the same integer arithmetic
directly, from the weights, embeddings and tokens: exact products, shift and
saturate, the `exp2_q` table, and integer division. They do not reuse any RTL.
The full-size test keeps every 2-bit weight slice at 0 or 1, so no crossbar
ADC saturates and the reference can use plain products.

To change the model size, override `HS_P` (a multiple of 128, with `3·HS_P`
a multiple of 192), `TILES_P`/`CORES_P_TILE`, `NAHCT` (at least `HS_P/64`)
and `SL_MAX_P` (a multiple of 64) on `xformer_top`. The engine tests show
the reduced settings.
