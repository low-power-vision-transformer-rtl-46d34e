# A low-power ViT encoder accelerator with token and FFN2 pruning

This is synthesizable SystemVerilog for an INT8 accelerator of vision-transformer encoder blocks.
It is sized for DeiT-Small: 197 tokens, 384 features, 6 heads of 64, FFN hidden size 1536.
The design rests on three ideas:

1. **One matrix engine with a reconfigurable output order.** Every product of the encoder block
   (QKV, Q·Kᵀ, attention·V, projection, FFN1, FFN2) runs on the same 512-MAC fabric. The engine
   produces its results either row by row or column by column. The order is chosen so that the
   next product, or the softmax, can read them as they are, without a transpose pass.
2. **Dynamic token pruning.** After attention, the class token's attention row ranks all tokens.
   Only the top `K = ceil((N-1)·ρ)` tokens (plus the class token) go on to the next layer. The
   ranking uses a comparison-free bit-plane maximum finder that emits one index per cycle.
3. **Dynamic FFN2 weight pruning.** FFN1 uses ReLU instead of GELU, so many hidden dimensions are
   nearly all zero. The sum of each hidden dimension over all tokens is compared with a threshold.
   Only dimensions above it are stored, and only their FFN2 weight rows are fetched.

The clock target is 1 GHz. At that clock the fabric does 512 MACs per cycle, which is 1024 GOPS.

## The compute fabric: one 8×64 step per cycle

```
             64 weights (one output column n, reduction chunk kt)
             ┌─ group 0 gets w[kt*64 +  0.. 7] ─┐ ... ┌─ group 7 gets w[kt*64+56..63] ─┐
 token row r │ PE array r: 8 MACs, x[r][0..7]   │     │ PE array r: x[r][56..63]       │
  (8 rows)   └──────────── psum[0][r] ──────────┘     └────────── psum[7][r] ──────────┘
                               \___________ accumulator: Σ groups, Σ kt ___________/
                                        8 outputs OUT[mt*8 + r][n], r = 0..7
```

- `pe_array` is one row of 8 MACs. It multiplies 8 inputs of one token with 8 weights and sums
  the 8 products.
- `pe_group` holds 8 arrays, one per token row. All 8 arrays see the same 8 weights: the weight
  is broadcast down a column.
- Eight groups split a 64-element slice of the reduction dimension. Group g takes elements
  `8g..8g+7`.
- `accumulator` adds the 8 group results of each row. It keeps adding over the `K/64` chunks of
  the reduction. On the last chunk it emits 8 results at once: one output column `n` for the 8
  token rows of tile `mt`.
- For K = 384 this takes 6 cycles per output column.

Reductions that are not a multiple of 64 are handled through the command's `k_len` field.
Weight elements at or beyond `k_len` are forced to zero, so stale memory contents past the end of
the matrix do not matter.

## Memories and data layout

| memory | banks × depth × 64 bit | size | role |
|---|---|---|---|
| Token SRAM | 64 × 160 | 80 KB | layer input, attention probabilities, layer output |
| Weight SRAM set 0 / set 1 | 8 × 576 each | 36 KB + 36 KB | weights; one set can be refilled over the bus while the other is in use |
| Temp SRAM1 / Temp SRAM2 | 64 × 80 each | 20 KB + 20 KB | Q, K, Vᵀ, attention outputs, FFN hidden layer |

The total is 232 KB. Every bank has one synchronous read port and one write port. A word is
8 INT8 values, and writes have byte enables (`banked_sram`).

**Activation layout** (token, temp). Element `A[t][c]` of a matrix stored at `base` with row-tile
stride `stride` is placed as follows:

```
bank = (t % 8) * 8 + (c % 64) / 8        address = base + (t / 8) * stride + c / 64        byte = c % 8
```

One address applied to all 64 banks then reads a complete 8-token × 64-feature tile. That is
exactly what the PE groups consume in one cycle: bank `r*8+g` feeds array `r` of group `g`. When
a matrix is used as the X operand, its stride must equal the command's `k_chunks`.

**Weight layout.** Element `W[k][n]` sits in bank `(k % 64) / 8`, address
`base + n * k_chunks + k / 64`, byte `k % 8`. One address on the 8 banks gives the 64 weights of
column `n`, chunk `kt`.

**Stored activation as the broadcast operand.** In Q·Kᵀ the weight role is taken by Q, and in
P·V it is taken by Vᵀ. Row `n` of such a matrix is read from banks `(n % 8) * 8 + g` at address
`w_base + (n / 8) * k_chunks + kt`. That is the activation layout again, so it needs no special
store format.

**Transposed store.** With `dst_transpose`, output `OUT[t][n]` is written as element `[n][t]` of
the destination. The 8 rows of one beat then form one whole word. This is how V is stored as Vᵀ.
Softmax output is always stored this way, so each query's probability row becomes row `n` of the
matrix P.

## Commands and output order

The host (behind the memory controller) issues one command (`vit_pkg::cmd_t`) per matrix product,
`OUT[M][N] = X[M][K] · W[K][N]`. Its fields are:

- `m_tiles`, `k_chunks`, `n_cols`, `k_len`, `m_valid`: the sizes.
- `col_order`: the output order (see below).
- `x_src`/`x_base`: where X is read.
- `w_src`/`w_base`: where the weights are read. The source is weight set 0 or 1, or Temp SRAM 1
  or 2.
- `dst`, `dst_base`, `dst_stride`, `dst_transpose`: where the result is written.
- `shift`: requantisation is an arithmetic right shift of the 32-bit sum, saturated to INT8.
- `residual`, `res_src`, `res_base`, `res_stride`: add a stored INT8 matrix to the result.
- `relu`: apply ReLU.
- `softmax`, `cls_capture`: row softmax, and feeding the class-token row to token pruning.
- `prune`, `threshold`: FFN2 pruning.

`system_controller` walks three loops and issues one 8×64 chunk per cycle. The innermost loop is
always `kt`:

| `col_order` | loop order | outputs leave as | used for |
|---|---|---|---|
| 0, row-wise | `mt`, `n`, `kt` | one token tile, column after column | Q, projection, FFN2 |
| 1, column-wise | `n`, `mt`, `kt` | one output column for all tokens, tile after tile | K, Vᵀ, the scores of one query, FFN1 |

Column-wise order is what makes softmax and FFN2 pruning possible on the fly. In S = K·Qᵀ, with
K as X and Q as the broadcast operand, output column `n` is the complete score row of query `n`.
It leaves the accumulator 8 keys per beat, which is what the softmax unit wants. In FFN1,
column `n` is hidden dimension `n` for every token, which is the sum that FFN2 pruning needs.

The controller stalls in two cases:

- **Softmax command:** after each query row it waits until the softmax unit has finished that
  row.
- **Pruning command:** it leaves 3 idle cycles between hidden dimensions. The keep/drop decision
  of one dimension is then known before the next dimension is written, so the kept columns can be
  written compacted at positions 0, 1, 2, …

The command finishes with `done`, 6 cycles after the last issue, once the pipeline is empty. A
plain command takes `m_tiles · n_cols · k_chunks + 7` cycles.

A single-head encoder block maps onto the following sequence. The end-to-end testbench runs
exactly this sequence:

| step | X | broadcast / weight | order | store |
|---|---|---|---|---|
| Q = X·Wq | token | weight set | row-wise | temp 2 |
| K = X·Wk | token | weight set | column-wise | temp 1 |
| Vᵀ = (X·Wv)ᵀ | token | weight set | column-wise, transposed store | temp 1 |
| P = softmax(K·Qᵀ) | K (temp 1) | Q (temp 2) | column-wise + softmax | token, transposed |
| A = P·V | P (token) | Vᵀ (temp 1) | row-wise | temp 2 |
| O = A·Wo + X | A (temp 2) | weight set | row-wise + residual | temp 1 |
| H = ReLU(O·W1), pruned | O (temp 1) | weight set | column-wise + ReLU + prune | temp 2, compacted |
| Y = H·W2kept + O | H (temp 2) | kept rows of W2 | row-wise + residual | token |

While a command uses one weight set, the other can be written over the bus. The testbench loads
Wo this way while Q is being computed.

## Datapath pipeline

| stage | work |
|---|---|
| 0 | the controller applies the addresses; SRAM read |
| 1 | operands are routed to the PE groups; multiply; the PE registers load |
| 2 | accumulator |
| 3 | requantise (shift, saturate); start the residual read; feed the softmax |
| 4 | residual add (saturating), ReLU, FFN2 pruning, write-back |

Softmax results are written when the softmax unit emits them. The data bus is not arbitrated against
the datapath. While a command runs, the host may use the bus only on the weight SRAMs, normally on the set that the
command does not read. The top checks this,
and the rules that X, the broadcast operand, the residual source and the destination are
different memories, with assertions.

## Softmax

The unit stores one score row (up to 256 keys) while tracking its maximum. It then computes
`e = 2^(-(max - x)/8)` for each key, one 8-key tile per cycle. The fractional part comes from an
8-entry table of `2^(-f/8)` in Q15, and the integer part is a right shift. The unit sums the `e`
values, does one division `2^31 / sum` per row, and then emits `p = e·recip >> 24`. That is the
probability times 128, saturated to 127.

A score is therefore read as a base-2 exponent with 3 fraction bits. The requantisation shift of
the Q·Kᵀ command sets that scale, folding in `1/sqrt(d)` and `log2 e` approximately.

Keys at index `m_valid` or above get probability 0. The row is padded with zero tiles up to a
multiple of 64 keys, so that P·V can use it directly as a 64-aligned reduction.

Timing for a row of T tiles:

- T cycles to take the row in.
- T cycles of exponentials.
- 1 cycle for the reciprocal.
- `ceil(T/8)·8` output beats. The first beat appears T+3 cycles after the last input beat.

The testbench holds the result to within 2 LSB of a floating-point softmax.

## Token pruning

When a softmax command has `cls_capture` set, the probabilities of query 0 (the class token) are
added into the class attention buffer. Every head adds into the same buffer, so after all heads
it holds the head sum, which ranks tokens the same way as the head average. The host then pulses
`tp_start` with N and ρ. ρ is an 8-bit fraction, so 0.5 is 128.

1. **Shuffle** (1 cycle): the buffer is turned into 12 bit planes, where plane b holds bit b of
   every token's value. Token 0 is never a candidate, because the class token is always kept.
2. **Select** (1 index per cycle): starting from the live candidates, the set is narrowed plane
   by plane from the MSB. At each plane the set keeps only the members with a 1 there, if any
   member has one. The lowest-index survivor is the maximum. It is written to the new token index
   buffer and removed from the candidates. Ties therefore go to the lower token index.
3. `done` comes after `K = ceil((N-1)·ρ)` indices, K+2 cycles after start. For DeiT-S that is
   98 indices.

The host reads the kept indices through `tp_rd_addr`/`tp_rd_idx`, most important first. It uses
them to gather the next layer's tokens: the class token, then those K tokens.

## FFN2 pruning

During a pruning FFN1 command (column-wise, ReLU on), each beat holds 8 post-ReLU values of one
hidden dimension.

- An adder tree sums the beat, and a register accumulates over the beats of the dimension.
- A local counter detects the last beat. Its count is `m_tiles`, the number of token tiles, so it
  follows the token count after pruning.
- One cycle after the last beat, the sum is compared with `threshold` (strictly greater keeps).
- A kept dimension's index goes into an index buffer, and a global counter counts kept indices.
- After 8 kept indices, `ffn2_ready` presents them at once on `ffn2_idx`. They name the FFN2
  weight rows the memory controller has to fetch.
- `ffn2_flush` emits a final partial group at the end of the hidden dimension.

Kept dimensions are stored compacted. `ffn2_kept` tells the host how many there are, and that
count is the `k_len` of the following FFN2 command. Dropped dimensions cost neither storage, nor
weight traffic, nor MAC cycles in FFN2.

`threshold` is in the integer scale of the summed INT8 outputs. A real-valued threshold (for
example 1.0) must be converted with the FFN1 output scale.

## Where this design departs from, or goes beyond, the source architecture

- **FFN1/FFN2 interleaving is done by command sequence.** The original scheme alternates FFN1
  and FFN2. After each group of hidden columns, the matching FFN2 weight rows are applied and
  the partial result is accumulated, so the full hidden layer is never stored. Here each step of
  that alternation is a separate command:
  - FFN1 on a block of 64 hidden dimensions, with pruning.
  - FFN2 on that block's kept rows, with the running output as its own residual source.

  The partial results are therefore summed as saturated INT8 values, not at accumulator width.
  The source gives no width for them.
- **No layer sequencer.** The host issues the commands of a layer and of each head, and runs token
  pruning and the token gather. The engine, the loop orders and the pruning units are in
  hardware.
- **Own choices where no detail was available:**
  - the command format and all address mappings;
  - requantisation by a shift;
  - the softmax arithmetic;
  - accumulator and partial-sum widths (32 and 20 bits);
  - the 5-stage pipeline and the bus protocol;
  - summing the class attention over heads instead of averaging;
  - tie-breaking in token selection.
- **LayerNorm and the patch embedding are not built.**
- **The memory controller and DRAM are outside the design.** The `bus_*` port stands for them:
  one 64-bit word per cycle into any bank of any memory, and reads return one cycle later.
- **Size limits.** Commands are limited to:
  - 63 token tiles (504 tokens);
  - K up to 1984 (31 chunks);
  - N up to 2047.

  Softmax rows and the class attention buffer hold up to 256 tokens. DeiT-S fits. ViT-B/16
  (768 features) does not fit the token SRAM at 197 tokens and needs 48 reduction chunks in FFN2.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block against values
computed independently in the testbench, ends with a `TB_RESULT checks=… failures=…` line, and
has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pe_array` | random dot products, extreme values |
| `tb_pe_group` | 8-row products, one-cycle latency, psum held while idle |
| `tb_accumulator` | sums over groups and chunks, emit timing (K/64 cycles per output) |
| `tb_banked_sram` | random reads and writes with byte enables, read-before-write (small copy: 8 banks × 24) |
| `tb_relu_unit`, `tb_residual_unit` | exhaustive over all INT8 inputs |
| `tb_softmax_unit` | random rows against a floating-point softmax (2 LSB), masking, padding, latency |
| `tb_token_pruning` | top-K against a reference sort, K formula, class-token exclusion, latency |
| `tb_ffn2_pruning` | per-dimension decisions, groups of 8, flush |
| `tb_system_controller` | loop orders, addresses, cycle counts, softmax and gap stalls |
| `tb_vit_accel` | a full single-head encoder block on the top level (see below) |
| `tb_deit_s` | one DeiT-S head at the model's real sizes on the top level (see below) |

`tb_vit_accel` runs the whole top with its default sizes, on 16 tokens, 64 features and an FFN
of 128. It runs the command sequence in the table above, then token pruning (K = 8 of 15), then
FFN1 with pruning and FFN2 on the kept dimensions. It checks every stored element against an
integer reference model kept in the testbench, reading results back over the bus. It also counts
how often each mechanism occurred and counts a failure for any mechanism that did not occur. The
mechanisms are: both output orders, transposed store, softmax stalls, class capture, residual,
ReLU zeroing, requantisation saturation, kept and dropped FFN dimensions, token selection, and
weight-set refill during a command.

`tb_deit_s` runs at the real DeiT-S sizes: 197 tokens and 384 features.
- Q and K for one head. Each takes 25·64·6 = 9600 issue cycles and finishes in 9607 cycles.
- The softmax rows of the first 8 queries over 197 keys, with keys 197–255 masked.
- Top-K selection with N = 197 and ρ = 0.5. It must return K = 98 indices in K+2 cycles, in the
  order of a reference sort.
- One block of 64 FFN hidden dimensions with pruning, using 25 beats per dimension. Then FFN2 on
  the kept dimensions, with the residual added.
- The complete FFN of the 99 surviving tokens with the full hidden size of 1536, in the
  interleaved order: 24 blocks of 64. One layer-wide threshold set at the median keeps about
  half of the FFN2 weight rows.

Every command is checked to take exactly one 8×64 step per cycle.

To simulate one testbench with Verilator 5, put the package first:

```
verilator --binary --timing --assert -Irtl rtl/vit_pkg.sv tb/tb_vit_accel.sv \
          --top-module tb_vit_accel -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. The top-level build takes about a minute, and the
simulation takes well under a second.

## Files

- `rtl/vit_pkg.sv`: sizes, the activation layout, memory and command types.
- `rtl/vit_accel.sv`: top level: memories, operand routing, pipeline, write-back, bus.
- `rtl/system_controller.sv`: loop sequencer and address generator.
- `rtl/pe_array.sv`, `rtl/pe_group.sv`, `rtl/accumulator.sv`: the MAC fabric.
- `rtl/banked_sram.sv`: the banked memory, used for all five memories.
- `rtl/requant.sv`, `rtl/residual_unit.sv`, `rtl/relu_unit.sv`, `rtl/softmax_unit.sv`:
  post-processing.
- `rtl/token_pruning.sv`, `rtl/ffn2_pruning.sv`: the pruning units.
- `tb/tb_*.sv`: the testbenches.
