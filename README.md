# An MXInt encoder block for vision transformers

This is synthesizable SystemVerilog for one transformer encoder block of a DeiT vision
transformer. All arithmetic is done in MXInt, a microscaling integer format: a block of
values shares one 8-bit exponent and each value keeps only a small integer mantissa. The
matrix multiplies use the format directly. The three non-linear operators (LayerNorm, GELU
and softmax) are rebuilt so that they also work almost entirely on the short mantissas, with
tiny look-up tables in place of square roots, error functions and exponentials.

The block is a dataflow pipeline. Each operation of the encoder has its own hardware unit.
Tokens stream through the units as 16-value MXInt blocks on valid/ready handshakes. Weights
are fetched once from off-chip memory into on-chip tile stores by a fixed schedule, through
a ping-pong buffer.

## Number format

A value is `m * 2^(e - 127)`.

- `m` is a two's-complement mantissa. Its sign is part of the width.
- `e` is an unsigned 8-bit exponent shared by the block.
- Activations come in blocks of 16 values with 8-bit mantissas (`act_blk_t`).
- Weights come in 16x16 tiles (256 values) with 6-bit mantissas and one exponent
  (`w_tile_t`, 1544 bits).
- Matrix multiplies accumulate with 12-bit mantissas.

The sizes 16/256, 8/6/12 bits and the 8-bit exponent are the published design point. The
bias of 127 and the two's-complement mantissa are this implementation's convention.

Every unit that produces a block ends in `mxint_block_quant`, which turns 16 wide integers
with a common exponent back into an MXInt block:

1. One leading-sign count over the OR of all lanes (negative lanes inverted).
2. One shared right shift.
3. Round half up.
4. Saturation.

That single shared normaliser per block, instead of one per value, is the main hardware
saving of the format.

## The encoder block (`vit_block`)

```
X -> LN -> X_n ---------------------------------------------+
        |  per head h: Q = W_Q X_n, K = W_K X_n, V = W_V X_n  |
        |  K, V -> 16x16 tiles (V transposed)                 |
        |  A = Q K^T -> softmax -> B_h = A V                  |
        +-> concat(B_h) -> B_o = W_O B_c -> (+ X_n) -> LN -> B_n
B_n -> U = W_U B_n -> GELU -> D = W_D GELU(U) -> (+ B_n) -> O
```

Defaults are DeiT-Tiny: 197 tokens, hidden size 192, 3 heads of 64, MLP width 768. The
original paper does not print these sizes; they come from the standard DeiT configuration.

The block works in three phases:

1. **Weight load.** After `start`, `weight_scheduler` reads all weight tiles (1728 at the
   defaults) from off-chip memory through `pingpong_buffer` into the tile stores of the
   linear units. `weights_ready` then rises and the block accepts tokens.
2. **Sequence.** Tokens arrive as `DIM/16` blocks each on `x_valid/x_ready/x_blk`.
   - The first LayerNorm feeds the Q, K and V projections of every head, plus a FIFO that
     keeps `X_n` for the first residual.
   - K and V go into `kv_tile_builder`s, which regroup 16 tokens x 16 features into one
     tile with one exponent. V is transposed.
   - Q waits in a FIFO, because a row of `Q K^T` needs every key. Attention of a head
     starts once that head's K and V tiles are complete.
   - The `Q K^T` and `A V` products reuse `mxint_linear`, with the built tiles as
     8-bit "weights".
3. **Output.** Each row of scores goes through `mxint_softmax`, then `A V`, the
   concatenation of the heads, `W_O`, the first residual, the second LayerNorm, the MLP and
   the second residual. Results leave on `o_valid/o_ready/o_blk`.

Weights sit in off-chip memory in schedule order:

- for each head, Q then K then V;
- then `W_O`, `W_U` and `W_D`;
- inside a matrix, tile (output block o, input block i) is at `o * IN_DIM/16 + i`.

The `1/sqrt(d_k)` scale of the attention scores is expected to be folded into `W_Q`. There
are no bias vectors. LayerNorm has no `gamma`/`beta` (see below).

### Linear units (`mxint_linear`, `mxint_dot_tile`, `mxint_add`)

`mxint_dot_tile` multiplies a 16-value activation block by a 16x16 weight tile:

- 256 small integer products and sixteen adder trees;
- one exponent addition for the whole tile;
- one `mxint_block_quant` to 12-bit mantissas.

`mxint_linear` holds one token. It walks the weight tiles of one output block, one tile
per cycle, and adds each partial block into a 12-bit MXInt accumulator with `mxint_add`,
which aligns the smaller-exponent operand and renormalises. At the end of the row the result
is rounded to 8 bits. A token costs `IN/16 + OUT/16 * (IN/16 + 1)` cycles. There is one
dot-product tile per unit; the design's parallelism is a choice left open.

### LayerNorm without a square root (`mxint_layernorm`)

This unit has the least obvious arithmetic.

1. **Align the blocks.** The blocks of a token have different exponents. They are aligned
   to the largest by shifting the others right by up to 6 bits. A block more than 6 below
   the largest contributes zero.
2. **Drop the exponent.** With `epsilon = 0`, a common scale cancels out of
   `(x - mean) / sqrt(var)`. So the exponent drops out and the rest is integer arithmetic
   on the aligned mantissas: mean, difference, variance.
3. **Cast the variance.** The wide integer variance is cast to a small float: a 5-bit
   mantissa `vm` and an exponent `ve`.
4. **Look up `1/sqrt`.** It is `LUT(vm) * 2^(-ve/2)` when `ve` is even. When `ve` is odd it
   is `LUT(vm/2) * 2^(-(ve+1)/2)`. The halving of the exponent is then exact, and the
   table needs only 32 entries, `LUT(i) = round(2^9 / sqrt(i))`.
5. **Scale.** Each difference is multiplied by the table value, shifted, and re-blocked.

The unit is sequential: 4 passes over the token's blocks plus 2 cycles, i.e. `4*DIM/16+2`
cycles per token. The outputs `align_cnt` and `flush_cnt` count aligned and flushed blocks.

### GELU with a 32-entry table (`mxint_gelu`)

GELU changes its input little, so the output keeps the input exponent. Each lane is
shifted to a fixed-point number with 2 fraction bits, inside the domain (-4, 4). The
fixed-point width is `k = LUT bits + log2(domain) - 1 = 5 + 2 - 1 = 6`. Then:

- `x >= 3` passes unchanged (ReLU region);
- `x <= -3` becomes 0;
- otherwise the value indexes a 32-entry table of `round(GELU(x) * 32)`, whose result is
  shifted back to the block exponent.

The published equation prints the lower case as `x <= a`. The figure it comes with shows
zero on the negative side, and that is what is built. `out_path` reports per lane which of
the three cases was used. One register stage.

### Softmax as shifts and a 4-entry table (`mxint_softmax`)

Method:

- `e^x = 2^(x log2 e) = 2^n * 2^r`. The product `x log2 e` uses a constant with 8 fraction
  bits.
- `r` keeps only 2 fraction bits, so `2^r` is the 4-entry table `{128, 152, 181, 215}/128`.
- Each exponential is therefore already a small float: mantissa `LUT(r)`, exponent `n`.
  No maximum is subtracted, which MXInt's shared exponent would make awkward.

The row is processed in three passes:

- **LOAD:** compute and store `n, r` for every lane, and add all exponentials into a float
  sum.
- **DIV:** a restoring divider forms the reciprocal of the sum mantissa once per row
  (31 + 1 cycles).
- **OUT:** each output is `LUT(r) * reciprocal * 2^(n - n_sum)`, re-blocked per 16 lanes.

Lanes past the sequence length (the padding of the last block: 197 = 12*16 + 5) are masked
out. A row takes `2*ceil(SEQ_LEN/16) + 32` cycles.

### Weight path (`weight_scheduler`, `pingpong_buffer`)

`pingpong_buffer` has two banks of 8 tiles. One bank is filled from memory while the other
drains into the tile stores, and the roles swap when a fill completes and the drained bank
is empty.

`weight_scheduler` keeps one memory request in flight. Its interface:

- `mem_req/mem_addr`: a request for one tile;
- `mem_rvalid/mem_rdata`: the tile, one full tile per response;
- `st_we/st_idx/st_data`: the store port, where `st_idx` is the tile's schedule index,
  which `vit_block` decodes into a unit and a local address.

The off-chip memory itself is not part of the RTL. Its port is the top's `mem_*` signals.

### Attention helpers (`kv_tile_builder`, `mxint_concat`, `stream_fifo`)

`kv_tile_builder` stores K (or V) for a whole sequence. Each group of 16 tokens is aligned
to the group's largest exponent and written as tiles; tokens after the last one are zero
padding. `mxint_concat` takes the blocks of the heads in head order. `stream_fifo` is a
plain valid/ready FIFO.

## Where this departs from the published design

- Only one encoder block is built. Patch embedding, the stack of 12 blocks and the
  classifier are not.
- LayerNorm has no affine part (`gamma`, `beta`). Where it sits in the optimised datapath is
  not described.
- The LUT contents, the fixed-point widths inside softmax, the rounding modes, the handshakes,
  the buffer sizes, the weight order and the one-tile-per-cycle linear units are this
  implementation's choices.
- All weights are loaded before the first token. The block therefore holds every weight of
  an encoder block on chip: 1728 tiles, about 2.7 Mbit, at the defaults.
- DeiT-Small (384 wide, 6 heads) and DeiT-Base (768, 12 heads) need the parameters set
  accordingly. At the defaults only DeiT-Tiny's shapes fit.

## How far it is verified

Each unit has a self-checking testbench in `tb/`. It compares the unit with a model that is
written independently in double precision, or bit-exact where the arithmetic is defined.
Sizes are reduced where that keeps runs short.

`tb_vit_block` runs a whole encoder block at reduced size: 20 tokens, hidden 32, 2 heads,
MLP 64. It checks the result against an exact double-precision encoder block (exact
LayerNorm, softmax and GELU), using the same generated weights. It requires:

- cosine similarity above 0.97 per token;
- relative error below 0.15 overall.

It also counts each of these mechanisms and fails if one never happens:

- ping-pong swaps;
- LayerNorm alignment;
- LayerNorm flushing;
- softmax padding lanes;
- the three GELU paths;
- Q waiting for K/V;
- output back-pressure.

`tb_vit_block_full` does the same at the default DeiT-Tiny size, with the block at its
default parameters. One sequence of 197 tokens takes about 252,000 clock cycles, including
the weight load. The measured relative error against the floating-point block is about 6%
(about 4% at the reduced size). Most of it comes from 8-bit activations and 6-bit weights.

Every testbench has been shown to fail on a deliberately broken copy of its unit.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/mxint_pkg.sv tb/mxint_ref_pkg.sv \
    tb/tb_vit_block.sv --top-module tb_vit_block
./obj_dir/Vtb_vit_block
```

Replace `tb_vit_block` by any other testbench. Every run ends with a line
`TB_RESULT checks=N failures=M`. `tb/vit_block_harness.sv` holds the end-to-end stimulus,
the memory model and the reference. `tb/mxint_ref_pkg.sv` holds the reference arithmetic.
