# A ternary-LLM accelerator for prefill and decoding

This is a SystemVerilog model of an accelerator for a BitNet-style language model on a small FPGA.

In such a model:
- every weight is -1, 0 or +1 (about 1.58 bits per weight);
- activations are 8-bit integers.

The design rests on two ideas.

1. **Matrix multiplication by table lookup, not by multipliers.**
   - Take G = 3 activations. There are only 3^3 = 27 ways a ternary weight triple can combine them. Compute all 27 signed sums once.
   - After that, every weight triple becomes a 5-bit index into that small table.
   - A whole output column is a sum of table reads. No multiplier is needed anywhere in the linear layers.
2. **Prefill attention in reverse order.**
   - Causal attention only needs the lower triangle of the score matrix.
   - Queries are handled in groups of p, starting from the *last* tokens.
   - Keys and values stream from the end of the prompt towards the start.
   - A query becomes active only when its own key is reached. Masked scores are therefore never computed.
   - Chip memory holds only p queries, one key and one value.

Around these two engines sit:
- a decoding attention engine, which is also used for the vocabulary projection (LM head);
- a special-function unit: RMSNorm with quantization, absmax quantization, RoPE, add and multiply;
- an on-chip buffer for the hidden state of the token being decoded;
- a command-driven controller.

The host runs the model one command at a time: "matmul with these weights", "prefill attention over N tokens", "RMSNorm this vector", and so on. Model tensors live in external DRAM and stream in and out as 256-bit beats.

All parameters default to the main configuration:

| Parameter | Default |
|---|---|
| G (weights per table index) | 3 |
| T (lookup tables in parallel) | 32 |
| Q (output columns per cycle) | 16 |
| p (reverse-attention parallelism) | 4 |
| Heads × head dimension | 16 × 96, hidden size 1536, as in BitNet 0.7B |
| Beat width | 256 bits |

---

## 1. Number formats and beats

| Quantity | Format |
|---|---|
| Activations entering matmuls and attention | signed int8 |
| Weights | ternary, stored as base-3 table indices |
| Matmul accumulators | int32 |
| "Real" vectors (residual stream, norm inputs, attention outputs, logits) | signed Q16.16 (`fx_t`) |
| Scale factors | unsigned Q16.16 |
| Softmax score scale `s_scale` | Q8.24; it folds in the q/k dequant scales and 1/√d |

A 256-bit beat carries 32 int8 lanes or 8 Q16.16 lanes. Lane 0 sits in the least significant bits.

Two-operand operations (add, multiply, RMSNorm x/γ) take their operands as alternating beats, first operand first. The exception is when the first operand comes from the on-chip hidden-state buffer.

The shared types are in `rtl/tellme_pkg.sv`:
- `cmd_t`, `op_e`, `rd_req_t`;
- `sat_fx` and `sat_i8_round`, the saturation helpers.

---

## 2. The table-lookup ternary matmul (`tl_table_setup`, `weight_index_buffer`, `tl_matmul`)

This is the core of the design and the part that most needs explaining.

### Index encoding

Weights w_0..w_{G-1} are each in {-1, 0, +1}. For a group of G activations a_0..a_{G-1}, the group's index is

    idx = Σ_g (w_g + 1) · 3^g          (digit 0 least significant)

and the lookup table holds

    table[idx] = Σ_g w_g · a_g.

`tl_table_setup` is a combinational tree that produces all 3^G entries from G activations. With G = 3 this is 27 entries, each 8 + 2 + 1 = 11 bits. All 27 entries are stored; the half that are negations of the others are not folded away. An offline tool converts a ternary weight matrix into these indices. Index 13 (all digits 1) means "all three weights are zero".

### Weight buffer entry

One entry holds everything the engine needs for one cycle of lookups:
- Q = 16 output columns × T = 32 tables × 5 bits = 2560 bits = 10 beats.
- Index t of column q sits at bits `[(q*T+t)*5 +: 5]`.
- Column q of the entry at step m is output column `m*Q + q`.
- Table t covers activations `j*T*G + t*G .. +G-1` of block j.

`weight_index_buffer` holds two banks of `WDEPTH` = 2048 entries. The engine reads bank A while the loader writes bank B. A one-cycle `swap` exchanges them. Writes always go to the idle bank, and an entry's beats are assembled before the write. The read latency is one cycle.

### Engine schedule (`tl_matmul`)

For each token row i and each block j of T·G = 96 activations:
1. **Load.** The 96 int8 activations arrive as 3 beats.
2. **Set up.** All T = 32 tables are built in one cycle, using 32 `tl_table_setup` instances.
3. **Sweep.** k_grp = K/Q cycles. On each cycle:
   - read buffer entry `j*k_grp + m`;
   - do Q·T = 512 table reads;
   - add them in 16 trees of 32 terms;
   - accumulate into the K-entry int32 row accumulator.

   The first block of a row overwrites the accumulator instead of adding to it, so no clear pass is needed.

After the last block, the K accumulators leave as K/8 beats into `dequant_silu`.

Cost per block is 3 + 1 + k_grp + 1 cycles. For a 1536 × 1536 projection there are 16 blocks with k_grp = 96, giving 16 × 101 = 1616 cycles. Add 192 output beats, and a token takes about 1.8 k cycles. The unit test checks these counts exactly.

### Dequantization and SiLU (`dequant_silu`)

Each int32 result is multiplied by `act_scale × w_scale`. These are the absmax scale of the quantized input row and a per-tensor weight scale. The result is saturated to Q16.16. With `silu` set, the value x is replaced by x·σ(x). σ is built from e^{-|x|} (`exp_unit`) and one divide per lane. This stage sits directly on the matmul output stream, so dequantization and activation cost no extra pass.

### Ping-pong weight loading

The controller runs weight loads (`OP_LOAD_W`) on a separate DRAM channel. The host can therefore issue a load of the next weight tile while a matmul is computing on the current one.

A matmul command with `swap = 1` first waits for any running load to finish, then exchanges the banks.

A weight matrix larger than one bank must be split into tiles:
- a 1536 → 4096 projection needs 16 × 256 = 4096 entries, i.e. two tiles;
- the down projection needs three tiles.

Each tile is a separate matmul command writing a disjoint range of output columns, or accumulating over disjoint blocks on the host side.

---

## 3. Reverse-scheduled prefill attention (`reverse_scheduler`, `fused_attn_unit`, `reverse_attn_engine`)

### The schedule

Tokens are numbered 0..N-1. Queries are handled in batches of p = 4. Batch b covers queries `top-1 … top-p`, where `top = N - b·p`.

Within a batch, keys and values stream from j = top-1 down to 0, one token per step. While j is still inside the batch, the query of token j is loaded in the same step as k_j and v_j, into slot `top-1-j`. From then on that slot takes part in every later (smaller) j.

A query therefore never sees a key to its right. The causal mask is never evaluated, and no work is spent on masked scores.

For N = 8 and p = 4:

```
step : kv j  query loaded   active slots
 0   :  7      q7 -> s0      {q7}
 1   :  6      q6 -> s1      {q7,q6}
 2   :  5      q5 -> s2      {q7,q6,q5}
 3   :  4      q4 -> s3      {q7..q4}
 4-7 :  3..0   -             {q7..q4}          -> flush q7..q4
 8   :  3      q3 -> s0      {q3}
 ...
11   :  0      q0 -> s3      {q3..q0}          -> flush q3..q0
```

Batch b takes exactly `top` steps, so the total is N²/(2p) + N/2 steps when p divides N. For N = 512 that is 33 024 steps. Each step loads exactly one k/v token, plus at most one query. DRAM traffic per step is therefore constant.

`reverse_scheduler` emits these steps on a valid/ready interface, tagged with:
- the kv token;
- whether a query is loaded, and into which slot;
- first-of-batch;
- last-of-batch.

Its testbench checks, for many N:
- the exact sequence, against an independent model;
- that every causal (i, j) pair is visited exactly once and no masked pair is visited;
- the step formula;
- one step per cycle.

### Fused Q·K / softmax / ·V (`fused_attn_unit`)

Each (slot, head) pair keeps an online-softmax state:
- running max m;
- denominator l;
- numerator vector o of DH Q16.16 values.

This is a Flash-Attention-2 pass with block size one. For each streamed k_j/v_j and head h:

```
s  = (q · k_j) · s_scale                  p·32 int8 MACs per key beat
m' = max(m, s);  α = e^(m-m');  β = e^(s-m')
l  = α·l + β;    o = α·o + β·v_j;  m = m'
```

Per head, the step spends:
- DH/32 = 3 cycles on key beats;
- one bubble cycle for the softmax update;
- DH/32 = 3 cycles on value beats.

So one kv token costs H·(2·DH/32 + 1) = 112 cycles. At the end of a batch the unit emits `o / l · v_scale` for each active slot, one reciprocal per (slot, head). Output tokens leave tagged with their token index.

What stays on chip:
- p query tokens (p × 1536 int8);
- one k beat and one v beat;
- p × H values each of s, m and l;
- the p × 1536 numerators.

K and V stay in DRAM.

### The engine (`reverse_attn_engine`)

The engine walks the schedule. For each step it requests, on the shared DRAM read port:
- the query of token j, if one is due: 48 beats covering all heads;
- then k_j and v_j: for each head, 3 key beats followed by 3 value beats.

It forwards the returned beats into the fused unit and flushes the outputs at the end of each batch. Its counters `steps`, `q_loads` and `kv_loads` are exported at the top level.

---

## 4. Decoding attention and the LM head (`decode_attn_engine`)

During decoding there is only one new query, so attention is a matrix-vector product. Parallelism is low (32 MACs), and the work is split into three decoupled passes per head:

1. **Scores.** Stream the head's K cache (M rows of 3 beats). Write s_j = q·k_j · s_scale into the on-chip score buffer (`S_MAX` = 2048 entries) and track the maximum.
2. **Softmax.** Replace each s_j in place by e^{s_j - max}, one per cycle, sum them, and take one reciprocal.
3. **Values.** Stream the V cache and accumulate Σ e_j·v_j. Emit the result times v_scale/sum.

The LM head is the same datapath without the softmax:
- the query buffer holds the whole 1536-element hidden vector;
- the K stream is replaced by vocabulary weight rows;
- each row yields one logit, dot · s_scale;
- logits leave 8 per beat.

A 32 000-word vocabulary therefore streams 32 000 rows of 48 beats and returns 4 000 result beats. `S_MAX` = 2048 covers the longest evaluated context: a 512-token prompt plus 1024 generated tokens, i.e. 1536 tokens.

---

## 5. Special functions (`rmsnorm_quant`, `quant_unit`, `rope_unit`, `eltwise_add`, `eltwise_mul`, `hidden_state_buffer`)

### RMSNorm fused with quantization

RMSNorm followed by absmax int8 quantization looks like four passes:
1. sum of squares;
2. normalise;
3. absmax;
4. scale.

`rmsnorm_quant` uses the fact that rms(x) multiplies every element by the same factor, so it cancels inside the quantizer:

    q_i = round(127 · γ_i x_i / max|γ x|)

Pass 1 does three things at once:
- stores γ·x;
- tracks max|γ·x|;
- accumulates Σx², rounded per term.

Pass 2 emits the int8 vector while `isqrt_seq` computes rms = √(Σx²/n + ε) in parallel. Only the dequantization scale, max|γx| / (127·rms), needs the rms. That scale is delivered with `done` and is visible at the top as `last_scale`.

### The other units

- **`quant_unit`:** the plain two-pass absmax quantizer. It stores the vector, then emits round(x·127/max|x|), saturated to ±127.
- **`rope_unit`:** rotates adjacent pairs (x[2i], x[2i+1]) of each head by pos·10000^{-2i/d}.
  - The angle is kept in turns: a 32-bit phase accumulator with per-pair Q0.40 frequencies computed at elaboration.
  - The rotation is a 16-stage unrolled CORDIC.
  - The position advances per token, so the same unit serves prefill and decoding.
- **`eltwise_add` / `eltwise_mul`:** saturating Q16.16 add (residuals) and multiply (FFN gating), one beat per cycle.
- **`hidden_state_buffer`:** 192 beats, i.e. 1536 Q16.16 values, holding the decoding hidden state. Commands can read their first operand from it (`src = LOC_HIDDEN`) and write Q16.16 results into it (`dst = LOC_HIDDEN`). This saves DRAM round trips for residual adds between layers.

All streaming units use the same handshake: `in_ready = !out_valid || out_ready`. They have one register stage and no bubbles.

---

## 6. Controller and top-level interface (`top_ctrl`, `tellme_top`)

`tellme_top` has these ports:

| Port group | Contents |
|---|---|
| `cmd_valid/ready`, `cmd` (`cmd_t`), `cmd_done`, `wld_done` | One command at a time. A weight load may be accepted while a compute command runs. |
| `rd_req_*` (`rd_req_t`: kind, index, beats), `rd_valid/ready/data` | Compute read channel. Requests are answered in order by 256-bit beats. |
| `wrd_req_*`, `wrd_valid/ready/data` | Weight read channel into the idle weight bank. |
| `wr_valid/ready/data/tag/last` | Result beats. The tag is the token index for prefill attention, otherwise 0. |
| `op_count[10]`, `overlap_cycles`, `swap_wait_cycles`, `attn_*`, `last_scale` | Statistics and the last quantization scale. |

`cmd_t` fields per operation (see `tellme_pkg.sv`):

| op | fields |
|---|---|
| LOAD_W | d = beats |
| MATMUL | a = blocks per token, b = K/Q, c = tokens, scale_a/scale_b, silu, swap |
| PREFILL_AT | a = N, scale_a = s_scale (Q8.24), scale_b = v_scale |
| DECODE_AT | a = cached tokens (including the new one), scales as above |
| LM_HEAD | d = vocabulary rows, scale_a |
| RMSNORM_Q / QUANT | a = length/32 |
| ROPE | a = beats, b = first position |
| ADD / MUL | a = beats |

The controller starts the engine and swaps the weight banks if asked. It requests the operand stream, except for the attention engines, which issue their own `rd_req` kinds (`RQ_ATT_Q`, `RQ_ATT_KV`, `RQ_DEC_*`, `RQ_LM_W`). It then counts result beats, and the command completes when all of them have been written and no engine is busy.

A decoder layer is a short command list:

- **Attention half:**
  1. RMSNORM_Q;
  2. three matmuls (Q, K, V);
  3. ROPE on q and k;
  4. QUANT of q, k and v;
  5. PREFILL_AT or DECODE_AT;
  6. QUANT;
  7. the output matmul;
  8. ADD.
- **FFN half:**
  1. RMSNORM_Q;
  2. gate matmul with SiLU;
  3. up matmul;
  4. MUL;
  5. QUANT;
  6. down matmul;
  7. ADD.

Weight loads for the next matmul are interleaved on the weight channel.

---

## 7. Verification

Every block has a self-checking testbench in `tb/`. It compares the block against a reference computed independently in the testbench, in floating point or exact integer arithmetic. Tolerances are stated in each file. Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

Where the design defines a rate or a latency, the testbench checks it:
- matmul cycles per block;
- quantizer latency;
- one beat per cycle for the streaming units;
- reverse-attention step counts;
- decode throughput.

End-to-end tests:
- **`tb_tellme_top`** runs the whole top at reduced size (2 heads of 32, K_MAX = 64) through every command. The DRAM model adds random stalls and back-pressure. It counts each mechanism and fails if any never happened:
  - weight-load / matmul overlap;
  - swap waits;
  - SiLU;
  - hidden-buffer source and destination;
  - int8 results;
  - attention steps, including the N²/(2p)+N/2 check;
  - decode outputs;
  - LM-head logits;
  - back-pressure;
  - read stalls.
- **`tb_tellme_full`** runs the same sequence with every parameter at its default:
  - 16 heads of 96, hidden 1536;
  - 4096-wide matmul and norm limits;
  - 2048-entry weight banks;
  - S_MAX 2048.

  This is the largest configuration simulated. It passes, with about 20 000 checks. Its token counts are small (8-token prefill, 9-token decode, 20 LM rows), so the full Fig.-sized workloads (prompts up to 512, contexts up to 1536) are argued from the arithmetic above, not simulated.

To simulate with plain Verilator 5, put the package first:

```
verilator --binary --timing -Wno-fatal -j 0 \
    rtl/tellme_pkg.sv rtl/*.sv tb/tb_tl_matmul.sv --top-module tb_tl_matmul
./obj_dir/Vtb_tl_matmul
```

Replace the testbench name as needed. `tb_tellme_full` takes a few minutes to build and less to run. The others build in well under a minute.

---

## 8. What follows the source design and what is this implementation's own

Taken from the published design:
- G = 3, T = 32, Q = 16 and the full 27-entry tables;
- the table-lookup loop order with one lookup step per cycle;
- the ping-pong weight buffer;
- reverse scheduling with p query slots, one k and one v, and N²/(2p)+N/2 steps;
- fused online softmax in prefill;
- decoupled score/softmax/value passes for decoding, with the score vector on chip;
- reuse of that hardware for the LM head;
- RMSNorm and quantization fused into two passes;
- dequantization and SiLU fused onto the matmul output;
- RoPE, add and multiply units;
- an on-chip decoding hidden-state buffer;
- 256-bit data beats.

Own choices:
- all number formats (Q16.16, Q8.24, int32 accumulators, symmetric ±127);
- the base-3 digit order of the index;
- the command set, the two read channels and all handshakes;
- the exp approximation (2^f ≈ 1 + f(0.6565 + 0.3435 f), about 0.3 %);
- CORDIC RoPE with base 10000 and adjacent-element pairing;
- ε = 2^-16 in RMSNorm;
- a per-tensor weight scale;
- p = 4 (the figure's example value; the built value is not stated);
- `S_MAX` = 2048;
- decode parallelism of 32 MACs;
- the model shape: 16 heads of 96 and FFN width 4096 (BitNet 0.7B, not from the source);
- handling rms through the cancellation above.

### Departures and limitations

- **No overlap inside an engine.**
  - The matmul loads each 96-activation block before its sweep instead of during the previous one. This costs 3 cycles of 101 at the 1536-wide shape.
  - The attention engines wait for each request's data before issuing the next.

  Weight loading *is* overlapped with compute (ping-pong).
- **One engine at a time.** Only one compute command runs at a time. The source design may overlap engines; that is not modelled.
- **Plain DRAM streams.** The external interfaces are plain valid/ready streams, not AXI. DRAM, the AXI interconnect and the host CPU are outside the RTL. The testbenches model them.
- **Approximate functions.** exp, reciprocal and square root are simple approximations or exact integer forms sized for this fixed point. Their accuracy is what the testbench tolerances state, not a claim about the original.
- **Context length.** The source quotes a 1024-token context, but its evaluation goes up to 512 + 1024 = 1536 tokens. The buffers are sized for the larger figure.
- **No timing closure.** Clock rate, resources and power have not been measured. The source is an HLS design at 250 MHz; this RTL has had no timing closure.

---

## File list

| File | Contents |
|---|---|
| `rtl/tellme_pkg.sv` | Formats, opcodes, command and request types |
| `rtl/tl_table_setup.sv`, `rtl/weight_index_buffer.sv`, `rtl/tl_matmul.sv`, `rtl/dequant_silu.sv` | Ternary matmul engine |
| `rtl/reverse_scheduler.sv`, `rtl/fused_attn_unit.sv`, `rtl/reverse_attn_engine.sv` | Prefill attention |
| `rtl/decode_attn_engine.sv` | Decoding attention and LM head |
| `rtl/rmsnorm_quant.sv`, `rtl/quant_unit.sv`, `rtl/isqrt_seq.sv`, `rtl/rope_unit.sv`, `rtl/eltwise_add.sv`, `rtl/eltwise_mul.sv`, `rtl/exp_unit.sv`, `rtl/hidden_state_buffer.sv` | Special functions |
| `rtl/top_ctrl.sv`, `rtl/tellme_top.sv` | Controller and top level |
| `tb/tb_<block>.sv` | One testbench per block, plus `tb_tellme_top` and `tb_tellme_full` |
