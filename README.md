# A length-adaptive sparse-attention Transformer encoder in SystemVerilog

Natural-language inputs come in very different lengths. An accelerator that pads every
sequence of a batch to the longest one wastes most of its work: on SQuAD the longest
question-plus-context is 4.6 times the average. The attention itself adds a second cost,
because it grows with the square of the length. This design removes both costs.

* **Sparse attention by cheap ranking.** Each query is first compared with every key
  using 1-bit copies of Q and K: only the sign of each element, multiplied through a tiny
  look-up table. Only the ranking matters at this point. The best `TOPK` keys (30 by
  default) are kept, and the real 8-bit attention (scores, softmax, weighted sum of
  values) runs on those candidates only. The expensive part of attention then grows
  linearly with the length.
* **No padding: sequences flow through a length-aware pipeline.** An encoder layer is
  split into three coarse-grained stages. Every stage does work proportional to the
  sequence length, so a sequence occupies a stage for a time proportional to its length.
  The batch is sorted longest-first. A small scheduler hands each sequence to the next
  stage as soon as that stage is free. A sequence's next layer starts right behind the
  last sequence of the current layer. Short and long sequences, and consecutive layers,
  fill each other's gaps, and nothing is padded.

The RTL implements this at the BERT-base size by default: 12 layers, hidden size 768,
12 heads of 64, feed-forward width 3072, Top-30, batches of 16 sequences of up to 1024
tokens. All sizes are parameters.

## The three stages

| Stage | Name | Work per sequence of length n | Module |
|---|---|---|---|
| 1 | MM \| At-Sel | Q, K, V = X·Wq, X·Wk, X·Wv; 1-bit codes of Q and K; for every head and query, approximate scores against all n keys and Top-k selection | `stage1_mm_atsel` |
| 2 | At-Comp | for every head and query: load the k selected K and V rows; exact scores, scale, mask and exponent in one fused loop; Z = Σ e·v / Σ e | `stage2_atcomp` |
| 3 | FdFwd | Y = LN(X + Z·Wo); F = LN(Y + GELU(Y·W1)·W2); F replaces X | `stage3_ffn` |

Stages talk only through the off-chip HBM. Stage 1 leaves Q, K, V and one *index word*
per (head, query row). Stage 2 leaves Z. Stage 3 overwrites the sequence's X rows, which
become the next layer's input. Each stage has its own HBM channel (`hbm_*[0..2]` on the
top). The HBM itself is outside the design. The testbenches model it as memory that
answers a read one cycle later and has no back-pressure.

`lat_top` holds the scheduler and the three stages and nothing else. The host writes the
inputs and weights into HBM. It then sets `batch_cnt`, `batch_len[]` and `num_layers`,
pulses `start`, and waits for `done`.

## Stage 1: choosing the candidates

For each token, the X row (`D_MODEL/LANES` HBM words) is loaded into one input bank of
the matrix engine `mm_engine`. Q, K and V are computed one after the other. The engine
streams one weight column word per cycle from HBM: `LANES` = 64 multiply-accumulates per
cycle. When a column's words are done it outputs `sat8(Σ x·w >>> 7)`. Each finished
head word of Q, K or V is written to HBM. For Q and K it also passes through the
`bits_selector`, and the resulting codes go into two on-chip code buffers
(`N_HEADS × MAX_LEN` rows of 64 one-bit codes each).

Once every token has been projected, the selection pass runs head by head and query by
query:

1. `at_sel_unit` takes the query's code row and one key code row per cycle. It multiplies
   the 64 code pairs in `lut_mult` instances and sums them with an adder tree. With one
   bit per element the table holds ±1, so the score is the number of agreeing signs minus
   the number of disagreeing ones. With `QBITS = 4` the table has 256 entries of the
   products of two 4-bit codes. This mode is built and tested, but it needs a per-tensor
   scale (`qscale`) from the host.
2. `topk_sorter` takes the (score, key index) stream at one key per cycle. It is an
   insertion array: every slot compares the new score with its own, and the slots below
   the insertion point shift down by one. One cycle after the last key it holds the `TOPK`
   best keys in decreasing order; equal scores keep the lower key index first. For a
   sequence shorter than `TOPK`, the count is the sequence length.
3. The index word goes to HBM: candidate t in bits `[16t +: 16]`, count in the top byte.
   This needs `TOPK·16 + 8 ≤ LANES·8` (488 ≤ 512 by default); `candidate_loader`
   checks it at elaboration.

Selecting for one (head, query) takes about n + 4 cycles. The projections take
3·`D_MODEL`·(`D_MODEL`/`LANES`) cycles per token.

## Stage 2: exact attention on the candidates

Stage 2 is a small pipeline of its own, with a double buffer in the middle:

```
 HBM ──► candidate_loader ──► pingpong_buffer ──► fused_attention ──► attn_normalize ──► HBM (Z)
          (2.1)                 2 banks             (2.2)               (2.3)
```

* **2.1 `candidate_loader`.** It reads the index word, then the query row, then the
  selected K rows and V rows, into the free bank of the buffer: word 0 is q, words
  1..TOPK are K, words TOPK+1..2·TOPK are V. It then hands the bank over, with the
  candidate count as the bank's side word. A row takes 2·count + 7 cycles. The loader is
  started only while a bank is free.
* **2.2 `fused_attention`.** This is the fused loop. Per candidate slot j it reads k_j and
  v_j from the two read ports and forms the exact dot product q·k_j over all 64 lanes in
  one cycle. It scales the product by 1/√64. Slots at or beyond the count are masked to
  contribute exactly 0. The exponent is taken by `exp_unit`, which computes
  2^(x·log₂e): the integer part is a shift, and the fraction uses a second-order
  polynomial with error below 0.3 %. The score never leaves the pipeline and is never
  written to memory. A row takes `TOPK` + 3 cycles. The loop over the 64 elements is
  fully unrolled. The loop over candidates runs one per cycle.
* **2.3 `attn_normalize`.** Per lane it accumulates e_j·v_j, and it keeps one running
  Σe_j. At the end of a row the totals move to a holding register, and a bit-serial
  divider forms R = ⌊2^40/Σe⌋. Each lane's output is then `sat8(acc·R >>> 40)`. That is
  one division per row instead of one per element. The next row accumulates meanwhile. A
  result leaves about 43 cycles after its row's last element.

While 2.2 and 2.3 work on row i, 2.1 fills the other bank with row i+1. 2.2 starts a row
only when 2.3's divider can take it. Z rows are stored token-major, with word h being
head h, so Stage 3 reads a token's full Z row as consecutive words.

## Stage 3: output projection and feed-forward

`stage3_ffn` works token by token with one `mm_engine` and one `layernorm_unit`:

```
X, Z ─► Z·Wo ─► +X ─► LN ─► Y ─► Y·W1 ─► GELU ─► ·W2 ─► +Y ─► LN ─► F (over X)
```

The matrix engine's two input banks overlap each product with assembling the next
product's input vector. The LN output (Y) is written into bank 1 while bank 0 still
holds Z. The GELU outputs are written into bank 0 while bank 1 holds Y. `gelu_unit` is
combinational: x/2·(1 + erf(x/√2)), with erf approximated by a clipped second-order
polynomial, accurate to one LSB over all int8 inputs. `layernorm_unit` collects Σx and
Σx² while a row is written in. It then forms V = D·Σx² − (Σx)², r = ⌊√V⌋ (bit-serial) and
R = ⌊2^40/r⌋ (bit-serial). It streams out `sat8((16·(D·x − Σx)·R) >>> 40)`, which equals
(x − mean)/std with four fraction bits. The learnable gain and bias are taken as 1 and 0.

## Length-aware scheduling

`length_scheduler` first sorts the batch by decreasing length, in `BATCH` rounds of
arg-max over the lengths. Each sequence then steps through the states **StateMM →
StateAtten → StateFF** once per layer, and ends in **StateDone**. Each stage keeps its
own position in the sorted order and its own layer counter. The stage issues its next
job when two things hold: the stage is free, and the next sequence in its order has
reached that stage's state for that layer. A job is a one-cycle pulse carrying
`{slot, len, layer}`, and the stage answers with a one-cycle done.

Take three sequences A > B > C in one layer. Stage 1 runs A, B, C back to back. Stage 2
starts A as soon as Stage 1 has finished A, and so on. When Stage 1 has finished C, it
moves on to A of the *next* layer, as soon as Stage 3 has finished A. No stage ever waits
for the whole batch. A shorter sequence following a longer one never makes the next stage
wait, because it is shorter. This is why the batch is sorted longest-first.

The scheduler counts, per stage, the busy cycles and the cycles spent waiting while work
was left, and it counts the total cycles of the batch. These show the utilization
directly. The stages run at very different speeds with the default parallelism (see
below). The overlap still shows: in every end-to-end run the total time is well below the
sum of the three stages' busy times.

## Data layout and number formats

| Item | Format |
|---|---|
| Activations (X, Q, K, V, Z, Y, F) | int8, 4 fraction bits |
| Weights | int8, 7 fraction bits; matrix products return `sat8(acc >>> 7)` |
| Scaled scores | 8 fraction bits (dot product × ⌊2^16/√d_head⌋ >>> 16) |
| Exponents e_j | unsigned, 12 fraction bits |
| HBM word | `LANES`·8 = 512 bits |

HBM addresses are bit fields (`lat_pkg::act_addr`, `lat_pkg::w_addr`), so forming an
address needs no multiplier:

```
activations: {0, region[2:0], slot[4:0], head[4:0], token[11:0], word[5:0]}
             regions: X=0, Q=1, K=2, V=3, Top-k index words=4, Z=5
weights:     {1, 00000, layer[4:0], matrix[2:0], column[11:0], word[5:0]}
             matrices: Wq, Wk, Wv, Wo, W1, W2 = 0..5, stored column by column
```

Q, K and V rows are head-major: word (head h, token t) holds the 64 elements of head h.
`slot` is the sequence's position in the batch as given by the host, not the sorted
position.

## Unit timing

| Unit | Rate / latency |
|---|---|
| `mm_engine` | one weight word per cycle; a column's output 2 cycles after its last read; a new command is accepted in the cycle of `done` |
| `at_sel_unit` | one key per cycle, 1-cycle latency |
| `topk_sorter` | one key per cycle; result 1 cycle after the last key |
| `candidate_loader` | 2·count + 7 cycles per query row |
| `fused_attention` | `TOPK` + 3 cycles per query row |
| `attn_normalize` | result about 43 cycles after a row's last element; accumulation of the next row overlaps |
| `layernorm_unit` | about 75 cycles from `start` to the first output, then one element per cycle |
| `exp_unit`, `gelu_unit`, `bits_selector`, `lut_mult` | combinational |

## What follows the source design and what is this design's own

The following parts follow the source design:

* The three stages and the operators in each.
* Low-bit quantization of Q and K, with look-up-table multiplication for the approximate
  scores.
* Top-k selection at one key per cycle, with k = 30.
* Exact attention on the selected candidates only.
* A double buffer between the loading sub-stage and the fused score/scale/mask/exponent
  loop.
* Normalization by the sum of exponents after the weighted sum.
* HBM between the stages.
* A sorted, longest-first batch, driven by a per-sequence state machine with the states
  MM, Atten and FF.
* A batch size of 16.

The following are this design's own choices, made where the source is silent:

* The number formats and all fixed-point details: the exponent polynomial, the erf
  approximation, the integer layer norm without gain and bias, and rounding and
  saturation.
* The HBM address map and the index-word layout.
* One HBM channel per stage, with a fixed one-cycle read latency.
* An insertion array instead of a merge sorter for the Top-k.
* Masking only of empty candidate slots, for sequences shorter than k.
* The order of work inside each stage: tokens one by one, and heads one by one.
* Placing the output projection Wo in Stage 3.
* The job handshake and the statistics counters.

Some points disagree with the source description or leave parts out:

* **Quantization width.** The source explains the selection with 4-bit codes but reports
  results with 1-bit (sign) codes. The default follows the evaluated 1-bit form
  (`QBITS = 1`); 4 bits can be chosen. How the 4-bit scale factor is found is not
  described, so the host supplies it (`qscale`).
* **Per-stage parallelism.** The source sizes each stage's parallelism with an offline
  allocation algorithm, and can replicate stages, so that the stages take similar time.
  Its chosen numbers are not given. Here every stage has one 64-lane datapath. Stage 3 is
  therefore about three times slower than Stage 1 and dominates the run. The scheduling
  mechanism is unaffected, but the balance between stages is not reproduced. Widening a
  stage means widening its `mm_engine` and HBM word together (`LANES`).
* **No softmax max-subtraction.** The exponent clamps its input to [−16, 8) instead.
* **No bias terms** in the linear layers.

## Capacity against the evaluated models

| Workload | Fits the defaults? |
|---|---|
| BERT-base, RoBERTa (12 layers, 768, 12 heads) on SQuAD v1.1 (≤ 821 tokens), RTE (≤ 253), MRPC (≤ 86), batch 16 | yes: `MAX_LEN` = 1024, `BATCH` = 16 |
| DistilBERT (6 layers) on the same tasks | yes, with `num_layers` = 6 |
| BERT-large (24 layers, 1024, 16 heads, FFN 4096) on SQuAD v1.1 | not at the defaults; needs `D_MODEL`=1024, `N_HEADS`=16, `N_LAYERS`=24, `D_FF`=4096 (not simulated) |

The FFN widths are 4× the hidden size of each model.

## Verification

Each module has a self-checking testbench in `tb/`. It compares outputs with values
computed independently in the testbench, and checks the rates and latencies in the table
above. Each testbench prints `TB_RESULT checks=N failures=M` at the end. `tb_ref_pkg`
holds the reference arithmetic, written in plain integer SystemVerilog:

* the generated weights and inputs
* the exponent, GELU, square root and layer norm
* the address map

`hbm_model` is the behavioural memory. Weights are not stored. They are computed from
their address with a hash, so a full-size model needs no data files.

* `tb_lat_top` runs the whole encoder at a reduced size. The sizes are 8 lanes, hidden
  16, 2 heads, FFN 32 and Top-3, with four sequences of 5, 9, 2 and 7 tokens through two
  layers. It compares every Q and Z element of the last layer and every output element
  with a sequential reference model of the whole layer. It also counts how often each
  mechanism occurred:
  * stages overlapping
  * a next layer entering Stage 1 while Stage 3 still works on the previous layer
  * the batch being reordered
  * candidate masking
  * Top-k dropping keys
  * Stage 2's loader and fused loop overlapping

  A mechanism that never occurs counts as a failure.
* `tb_lat_full` is the same test at every default parameter (BERT-base size). It uses a
  batch shaped like the MRPC task: 53 tokens (the average), 86 tokens (the maximum) and
  12 tokens, through two layers. Building it with verilator takes several minutes.
  Simulating it takes a few minutes. The batch takes 28.1 million cycles. Stage 1 is
  busy for 8.6 million of them, Stage 2 for 0.3 million and Stage 3 for 25.6 million,
  which shows the stage imbalance described above.
* Each stage testbench (`tb_stage1`, `tb_stage2`, `tb_stage3`) runs its stage alone
  against the HBM model.
* `tb_length_scheduler` uses behavioural stages with length-dependent service times. It
  checks that every job respects the sorted order and the dependencies between stages
  and layers.

Every testbench was also run against a copy of its module with one deliberate bug, and
failed.

To run a testbench with verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/lat_pkg.sv tb/tb_ref_pkg.sv tb/tb_lat_top.sv --top-module tb_lat_top -Mdir obj
obj/Vtb_lat_top
```

Replace `tb_lat_top` by any other testbench name. All testbenches also pass with random
initial register values (`+verilator+rand+reset+2`).

## Files

* `rtl/lat_pkg.sv`: sizes, types, the address map and shared arithmetic helpers.
* `rtl/lat_top.sv`: the top.
* `rtl/length_scheduler.sv`: the scheduler.
* `rtl/stage1_mm_atsel.sv`, `rtl/stage2_atcomp.sv`, `rtl/stage3_ffn.sv`: the stages.
* Their building blocks:
  * `mm_engine`, `bits_selector`, `lut_mult`, `at_sel_unit`, `topk_sorter`
  * `candidate_loader`, `pingpong_buffer`, `fused_attention`, `exp_unit`,
    `attn_normalize`
  * `gelu_unit`, `layernorm_unit`
  * the bit-serial helpers `seq_divider` and `seq_isqrt`

Every file opens with a description of its interface and timing.
