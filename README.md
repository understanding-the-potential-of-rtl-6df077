# A spatial dataflow accelerator for one Transformer layer

This RTL builds one Transformer layer as a fixed pipeline of hardware
operators. The usual alternative is a single processing engine reused for every
layer. Here, instead, each linear and non-linear operator of the layer has its
own kernel. The kernels are chained by small FIFOs, so a token row flows from
one operator into the next as soon as it is produced. Only the attention keys
and values are held in full on chip. Weights and biases stay in off-chip
memory and are streamed in while the layer runs. A model is run by starting
the same layer hardware once per layer, with new weight addresses each time.

The default configuration is BERT-base:

- sequence length `L = 512`
- model width `D = 768`
- `H = 12` heads
- FFN width `DFF = 3072`
- quantisation W4A8: int4 weights and int8 activations

The weight GEMMs use 8×16 output-stationary systolic arrays. Each DSP-style
multiplier in these arrays computes two int4×int8 products at once. The two
attention GEMMs use 8×8 int8 arrays. `CAUSAL = 1` turns on the decoder
(GPT-style) attention mask. `WBITS = 8` switches the weight GEMMs to int8
weights with one product per multiplier, the W8A8 format used for GPT-2.

## 1. The layer as a dataflow graph

```
            X (L x D, int8, off-chip)
   L_Q ─────┬─────────── L_KV ──────────┬──────────────── L_I (X again)
     │      │             │             │                    │
   [q 8x16] │          [k 8x16]      [v 8x16]                │
     │      │             │             │                    │
     │      │        K double buf   V double buf             │
     │      │         (kv_buffer)    (kv_buffer)             │
     └──► [score 8x8: Q·K^T per head] ◄─┘  │                 │
               │ softmax (+ causal mask)   │                 │
          [context 8x8: P·V per head] ◄────┘                 │
               │  heads side by side                         │
           [p 8x16] → LayerNorm1 → (+) ◄─────────────────────┘
                                    │ R1
                   ┌────────────────┤
                   │          [f1 8x16] → GeLU → [f2 8x16] → LayerNorm2 → (+) → store
                   └── residual FIFO (RES_DEPTH) ───────────────────────────┘
```

`transformer_layer` is the top module. Its data path falls into three regions,
matching a split across the three dies of a large FPGA:

- **Region 0:** the Q, K and V projections.
- **Region 1:** the attention and the output projection `p`. The first
  LayerNorm and the first residual add also sit here.
- **Region 2:** the feed-forward network (`f1`, GeLU, `f2`), then the second
  LayerNorm and residual add.

Each region boundary is a valid/ready stream. Boundary pipelining between dies
is left to the implementation tools.

Every stream carries int8 elements in row-major order, one element per beat:
token by token, feature by feature. That single order lets every operator
start on a row as soon as its first elements arrive.

**The one synchronisation point.** Each query row needs every key and value,
so attention cannot start until K and V are complete. The score GEMM therefore
holds back Q until the K buffer bank is full. From then on all operators run
concurrently:

- attention for token block *b* overlaps the FFN of block *b − 1*.

The K/V buffers are double banked, and consecutive layers use alternate
banks. The top accepts `start` only when the whole layer is idle, though. So
in this version the second bank lets the K/V writer and the attention reader
work on different banks without a hazard, but it does not overlap two layers.
The hardware for that overlap is there; the control that would start the
next layer early is not.

**Residual paths.**

- The first residual add needs X again. A third loader (`L_I`) re-reads X
  from memory rather than buffering it.
- The second residual add needs R1, the output of the first add. The FFN
  consumes R1 much more slowly than it arrives, because `f1` and `f2` each
  take `D·DFF/(M1·M2)` cycles per block of 8 tokens. So R1 also goes into a
  FIFO of `RES_DEPTH = 4·M1·D` elements, waiting for its FFN result.

That depth is enough to avoid deadlock. Rows enter the FFN only as fast as
`f1` accepts them: one 8-row block per `D·DFF/(M1·M2)` cycles. About
`KG + M1 + M2` cycles pass between the last input and the first output of a
block. So at most about three blocks are in flight between the fork and the
second add.

**LayerNorm placement.** The layer diagram of the source design places each
LayerNorm on the sublayer output, before the residual add:
`out = x + LN(sublayer(x))`. The text calls the design post-LayerNorm. The
RTL follows the diagram. Moving LN after the add only changes which stream
feeds `layernorm_row`.

## 2. The GEMM engine (`gemm_engine`, `systolic_array`, `sa_pe`)

All seven matrix products use the same engine:

- `q`, `k`, `v` and `p` are D×D;
- `f1` is D×DFF and `f2` is DFF×D;
- `score` is Q·Kᵀ per head;
- `context` is P·V per head.

**Beats.** Work is organised in blocks of `M1 = 8` token rows. For each block,
the engine walks the output column tiles of `M2` columns. For each tile it
issues `KG` beats, one per reduction index `k`. A beat gives:

- every array row its activation `A[row][k]`;
- every array column its weight `W[k][col]`;
- on the first beat, every column its bias.

**Output-stationary array.** The array computes an M1×M2 tile in place:

- Activations move right and weights move down, one PE per cycle. Skew
  registers at the left and top edges make PE (i, c) see beat k at cycle
  k + i + c.
- A flag set travels with each activation: valid, first, last and the
  tile's output-buffer address.
- The accumulator starts from the bias on the first beat.
- On the last beat, the PE writes its finished sums straight into its own
  slice of the output buffer.

Because the result leaves on its own, the next tile follows with no gap.

**Buffers.** Both buffers have two banks:

- The **activation buffer** (M1 rows × K values) fills from the input stream
  while the array reads the other bank.
- The **output buffer** (M1 rows × N int32) is partitioned by array row. Every
  PE can write in the same cycle. One unit of output is emitted while the
  array fills the other bank. On the way out, each 32-bit sum is requantised
  to int8.

**Throughput.** The engine does one beat per cycle, so a GEMM of `rows × K × N`
costs `rows·K·N / (M1·M2)` cycles. This holds as long as a finished output
unit drains at least as fast as the next one is computed, which requires
`M1·M2 ≤ K`. The attention arrays meet this exactly: 8·8 = 64 = d_head. For
BERT-base:

- `f1` and `f2` each take 512·768·3072/128 ≈ 9.4 M cycles;
- `q`, `k`, `v` and `p` take 2.36 M cycles each;
- the score and context GEMMs take 512·512·768/64 ≈ 3.1 M cycles each.

The FFN therefore sets the layer's steady-state time. After the K/V
projections, everything overlaps, so one layer takes about
`l·d²/M_k + max(l·d²/M_k, l²·d/M_a, l·d·d_FFN/M_f)` cycles. At the defaults
that is 2.36 M + 9.44 M ≈ 11.8 M cycles, or 47 ms at 250 MHz. The full-size
testbench checks the measured latency against this figure.

**Groups (heads).** For the attention GEMMs the engine runs `G = H` groups,
each of `KG = d_head` or `KG = L` reductions. `ACT_PER_GROUP` and
`OUT_PER_GROUP` select the attention layouts:

- **Score GEMM:** one M1 × D block of Q serves all heads, and head g reads
  columns g·64 … g·64+63. The output of each head is its own unit: a row of
  L scores per query, which softmax needs.
- **Context GEMM:** each head's probabilities arrive as a fresh M1 × L block.
  The heads' outputs are concatenated side by side into a D-wide row.

**DSP packing (`dsp_pack_mul`).** In the int4 arrays each PE serves two
neighbouring output columns with one multiply, so an 8×16 array has 8×8
multipliers:

- The 27-bit operand holds `w0` at bits 0–3 and `w1` at bits 13–16, each sign
  extended: `op = w0 + w1·2¹³`.
- The 18-bit operand holds the int8 activation.
- The product is `a·w0 + a·w1·2¹³`. Since `|a·w0| ≤ 1024`, bits 11:0 hold
  `a·w0`.
- Bits 24:13 hold `a·w1` minus the borrow from a negative `a·w0`. Adding
  back bit 12 of the product corrects it.

A DSP48E2 has exactly this 27×18 multiplier. The RTL writes a plain `*` and
leaves the mapping to synthesis.

## 3. K and V buffers (`kv_buffer`)

Each buffer holds two banks of L×D int8 values. The K or V GEMM writes one
bank from its output stream while the attention GEMMs read the other. A bank
is released once it has been read for every block of queries. Its read side
is the "K/V loader" of the dataflow. It is organised to give `M2A = 8` values
per cycle, one per attention array column:

- **K mode:** the store is partitioned by key. A read returns `K[j..j+7][f]`
  for the current head: the weight word of the score GEMM. This is replayed
  per head and then per block of `M1` queries.
- **V mode:** the store is partitioned by feature. A read returns
  `V[j][f..f+7]`.

`bank_full[1:0]` is the double-buffer state. The score GEMM waiting on it is
the synchronisation point described above.

## 4. Non-linear units in fixed point

The source design computes softmax, LayerNorm and GeLU in floating point. This
RTL keeps everything in integers, with formats chosen so that each unit
matches a real-valued reference to within 1–2 LSB of its int8 output.

**Softmax (`softmax_row`).** Scores arrive as int8 with 4 fractional bits. The
1/√d_k factor is folded into the score requantisation. Each row passes three
overlapping stages:

1. buffer the row and take its maximum;
2. compute `e_j = 2^((x_j − max)·log₂e)` in Q0.16:
   - the integer part is a shift;
   - the fraction f uses `1 + 0.6565 f + 0.3435 f²`;
   - the row sum is accumulated at the same time;
3. run a 41-step restoring division `R = 2⁴⁰/sum`, then output
   `p_j = round(e_j·R / 2³³)`. This is a Q0.7 probability in [0, 127].

With `CAUSAL = 1`, keys after the query are excluded from the maximum and get
`e = 0`. The query index comes from the known emission order of the score
GEMM. The unit keeps a rate of about one element per cycle.

**LayerNorm (`layernorm_row`).** One row is accumulated as `S = Σx` and
`Q = Σx²`. Then `(x_i − mean)/std = (D·x_i − S)/√(D·Q − S²)`, so no division
by D is needed. The steps are:

1. a bit-serial integer square root gives R;
2. a restoring divider gives `inv = 2³⁶/R`;
3. each output is `round((D·x_i − S)·inv·γ_i / 2³⁸) + β_i`.

Formats: γ is int8 with value γ/64; β and the output use 4 fractional bits.
No epsilon is added. A constant row gives β. While one row is emitted, the
next is accumulated.

**GeLU (`gelu_unit`).** `x/2·(1 + erf(x/√2))` with the second-order erf
polynomial of integer-only BERT inference:
`erf(u) ≈ sign(u)·(1 − 0.2888·(min(|u|, 1.769) − 1.769)²)`.
It handles one element per cycle.

**Requantisation.** Every GEMM output is requantised as
`sat8(round(acc·mult / 2^shift))`. `mult` is a signed 16-bit value and
`shift` is 6 bits (`rq_cfg_t` in `llm_pkg`). The eight settings are inputs to
the layer, in this order: q, k, v, score, context, p, f1, f2. Choosing them is
part of quantising a model. The residual adds saturate.

## 5. Memory interface and data layout

`mem_loader` is the loader used by every data and parameter stream. It reads
`words` consecutive words from `base`, `repeats` times. Memory access is a
request/response port with in-order responses. The loader keeps at most as
many requests in flight as its output FIFO has free entries, so latency up to
the FIFO depth is hidden. `stream_store` writes the output stream to
`wr_base + i`.

The top has 15 read ports, each with base address `rd_base[p]`:

| port | stream | word | layout |
|---|---|---|---|
| 0, 1, 2 | X for L_Q, L_KV, L_I | 8 bits | row-major, `X[t][f]` at `t·D + f` |
| 3–8 | weights of q, k, v, p, f1, f2 | M2 × WBITS bits | word `ct·K + k` holds `W[k][ct·M2 + j]` in bits `WBITS·j` upwards |
| 9–14 | biases of q, k, v, p, f1, f2 | M2 × 32 bits | word `ct` holds `b[ct·M2 + j]` in bits `32j+31:32j` |

Weights are read once per block of M1 tokens (`repeats = L/M1`). That is
`D·D·WBITS/8` bytes per block for the D×D projections. Words are `MDW = 512` bits
on the port, of which each stream uses the low bits. The write port takes one
int8 element per beat.

**Control.**

1. Write γ/β for both LayerNorms through `ln_we`, `ln_addr`, `ln_gamma` and
   `ln_beta`.
2. Set `rq`.
3. Pulse `start` while `busy` is low.

`done` pulses after the last element is written.

## 6. Parameters

| parameter | default | meaning |
|---|---|---|
| `L` | 512 | tokens per run (fixed at build time) |
| `D`, `H`, `DFF` | 768, 12, 3072 | model width, heads, FFN width |
| `M1`, `M2` | 8, 16 | rows and columns of the weight-GEMM arrays |
| `M2A` | 8 | columns of the attention arrays |
| `CAUSAL` | 0 | 1 = decoder mask |
| `WBITS` | 4 | weight width of the six weight GEMMs: 4 (packed, W4A8) or 8 (W8A8) |
| `XFIFO` | 32 | depth of the FIFOs behind the X loaders |
| `RES_DEPTH` | 4·M1·D | second residual FIFO |

The design assumes the following, and some of it is checked by assertions:

- `D/H` is a multiple of `M2A`;
- `D` and `DFF` are multiples of `M2`;
- `L` is a multiple of `M1`;
- `M1·M2 ≤ D` and `M1·M2A ≤ D/H`.

At the defaults the on-chip memory is about 18 Mbit. The two K/V buffers
account for 12.6 Mbit of it.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog:

| testbench | what it checks |
|---|---|
| `tb_stream_fifo` | order, full and empty flags, occupancy count under random traffic |
| `tb_dsp_pack_mul` | all 2¹⁶ operand combinations against plain products |
| `tb_sa_pe` | packed and plain PEs: bias seeding, sums, capture timing, pass-through |
| `tb_systolic_array` | two shapes, back-to-back tiles, each PE's result and exact finishing cycle |
| `tb_gemm_engine` | four configurations (A-W packed, per-group A-A in both layouts, full rate) against an integer GEMM, plus a cycle bound for the full-rate case |
| `tb_kv_buffer` | K and V modes, both banks, per-head replay order |
| `tb_softmax_row` | plain and causal rows against real-valued softmax (±2 LSB), rate |
| `tb_layernorm_row` | against real-valued LayerNorm (±1 LSB) |
| `tb_gelu_unit` | every int8 input against exact GeLU (±1 LSB), rate |
| `tb_residual_add` | saturation, pairing under random stalls, one per cycle |
| `tb_mem_loader` | random latency and back-pressure, repeats, full-rate streaming |
| `tb_stream_store` | addresses, data, done pulse, one write per cycle |
| `tb_transformer_layer` | the whole layer, bit for bit |
| `tb_transformer_layer_full` | one layer at the default BERT-base size, including latency |
| `tb_gpt2_layer` | one GPT-2-medium layer (d = 1024, 16 heads, W8A8, causal) on a 64-token prompt, including latency |

**`tb_transformer_layer`.** This runs the whole layer at a reduced size:
L = 16, D = 16, 2 heads, DFF = 32, 4×4 arrays. It uses three instances, two
layers each: an encoder with int4 weights, a causal decoder with int4 weights,
and a causal decoder with int8 weights. The off-chip memory model adds random
latency and back-pressure. Every output element is compared bit for bit with
an integer reference model (`layer_checker`, `layer_tb_pkg`). The reference
uses the same fixed-point non-linear functions in plain behavioural code.

The bench also counts how often each mechanism happened and fails if any of
them never did:

- the score GEMM stalling for K/V;
- the second K/V bank in use;
- attention and FFN producing in the same cycle;
- memory back-pressure;
- masked softmax entries;
- the residual FIFO holding data;
- beats through the packed int4 arrays and through the int8-weight arrays.

**`tb_transformer_layer_full`.** This runs one layer at the default BERT-base
size, with no parameter overrides, against a memory with random latency and
no back-pressure. All 512×768 outputs must be written, and the first two
token rows are checked bit for bit. The layer latency must fall between the
pipeline estimate T of section 2 and 1.05·T plus two blocks of FFN time.
The model leaves out pipeline fill and drain, which the two blocks cover.
The measured latency is 12.10 M cycles, against T = 11.80 M. It takes
several minutes in Verilator. `tb_gpt2_layer` does the same at GPT-2-medium
width: int8 weights, causal mask and a 64-token prompt.

**Running a testbench.** To run one with plain Verilator (5.x), from the
directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/llm_pkg.sv tb/layer_tb_pkg.sv tb/tb_gemm_engine.sv --top-module tb_gemm_engine
./obj_dir/Vtb_gemm_engine
```

Files are found by module name through `-I`. Only `layer_tb_pkg.sv` is needed
for the layer testbenches, and it does no harm elsewhere.

## 8. Where this departs from the source design

- **Arithmetic.** Softmax, LayerNorm and GeLU use the integer formulations
  above instead of floating point. Where requantisation happens, and the
  `mult`/`shift` form it takes, are this design's own choices.
- **Weights.** Weights are streamed from memory once per 8-token block. The
  source design keeps double-buffered weight tiles on chip. Both hide memory
  latency, but this design needs more memory bandwidth.
- **Compute per operator.** One layer here takes about 12 M cycles at the
  defaults. The source design reports about 26 ms for all 12 BERT-base
  layers at 245 MHz, roughly 0.5 M cycles per layer, so it clearly
  instantiates many more multipliers per operator. It uses about 1,800 DSP
  blocks, against 512 array multipliers here. Its text does not say how the
  arrays are divided among operators. The throughput formula above holds for
  any `M`, so scaling up means several engines per operator with the column
  tiles divided between them.
- **Array sizes.** Each operator has exactly one array: 8×16 for the
  projections and FFN, 8×8 for attention. The source design's FFN regions
  hold several 8×16 arrays per die. Adding arrays per operator would mean
  splitting the column tiles between them.
- **Heads.** The layer diagram draws the attention block as a stack of
  copies. Here one attention path (score GEMM, softmax, context GEMM) visits
  the heads in turn. The mask is part of the softmax unit rather than a
  separate node.
- **No int8 packing.** The source design notes that two int8×int8 products
  could also share one multiplier. That option is not used: the int8 arrays,
  for attention and for `WBITS = 8`, do one product per multiplier.
- **Non-linear unit width.** The non-linear units handle one element per
  cycle, which is enough because their producers emit at most one per cycle.
- **Protocols and depths.** The stream protocol, FIFO depths, memory port
  protocol, data layouts and the order in which the attention GEMMs visit
  heads are this design's own.
- **Decode stage.** Only the prefill computation is built: the layer
  processes L tokens at a time. Decode-stage single-token generation, with
  the K/V cache append, is not built. Neither are the multi-FPGA links, the
  embedding and LM head, nor the host interface.
