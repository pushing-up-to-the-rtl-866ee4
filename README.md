# A bandwidth-bound LLM decoder for an embedded FPGA

Decoding one token of a 7-billion-parameter language model means reading
every weight of the model once. On a small FPGA board with a single DDR4
channel (4 GB, 19.2 GB/s) the time per token is therefore set almost entirely
by how many bytes are read and how close to the peak rate they are read.
Compute is secondary. This RTL implements a decoder built around that fact:

* **4-bit weights** (asymmetric, group size 128), stored in a layout where
  zero points, scales and weights are interleaved on the 512-bit bus, so a
  whole matrix is one long burst and no side table is needed on chip;
* an **8-bit KV cache**, quantized on the fly as keys and values are produced,
  with the per-token scale/zero packs gathered on chip into full bus lines;
* a **512-bit stream at one beat per cycle** (four 128-bit AXI ports at
  300 MHz, which equals the DDR bandwidth), consumed by a 128-lane FP16 dot
  engine that never waits for the scalar work;
* **scalar operations hidden under the dot products**: RoPE, the attention
  score of the current token, softmax, quantization, residual add, RMSNorm and
  SiLU all run element by element while the next matrix streams in;
* **hidden states never leave the chip**; only weights are read and only the
  KV cache is written.

The default parameters are those of LLaMA2-7B (hidden 4096, 32 layers,
32 heads of 128, MLP 11008, vocabulary 32000) with a context of up to 1024
tokens. The design follows a published accelerator for the Kria KV260 board.
The block structure, the weight and scale-zero formats, and the scalar-unit
algorithms are taken from that design. The wiring between the blocks, the
memory map, the ordering rules and all bit-level details are this
implementation's own choices. They are marked as such below and in each file
header.

## What happens for one token

The host writes three AXI-Lite registers (`axil_regs`): the token id, its
position `p` in the sequence, and whether it is a prompt token. It then
writes CTRL. From then on the command generator (`mm2s_cmdgen`) issues every
memory read for the token in this fixed order:

```
LN1 weights (layer 0), embedding row of the token
for each layer l:
  for each head h:
    W_Q[h]  -> q, rotated by RoPE, kept on chip
    W_K[h]  -> k, rotated; q.k formed on the fly ("local" score); k quantized
    K cache[l][h], tokens 0..p-1  (skipped when p = 0) -> scores -> softmax
    W_V[h]  -> v, quantized and written to the cache
    V cache[l][h], tokens 0..p    -> head output = sum_t prob_t * v_t
  LN2 weights, W_O (+ residual, mean square), W_gate, W_up (SiLU gating),
  LN1 weights of layer l+1 (or the final norm weights), W_down (+ residual)
LM head -> logits       (skipped for prompt tokens)
```

This per-head order is what hides the scalar work. The softmax of head `h`
runs while `W_V[h]` streams: it needs the key scores, which end before the
value projection starts, and it must finish before the value-cache read. In
the same way, RMSNorm of the new hidden state runs while the next norm
weights arrive, and quantization runs alongside the next projection.

Each command goes two ways. The splitter (`cmd_split`) turns it into four
equal reads, one per AXI port. A small queue passes it to the demultiplexer
(`stream_demux`), which must know what the returning stream contains.

## Memory formats

### Weights: 133-beat super-blocks

A W4 matrix of R x C is cut into groups of 128 consecutive weights of a row
(row-major). Each group has one FP16 scale and one 4-bit zero point.
128 groups form a super-block of 133 beats of 64 bytes:

```
beat 0        : 128 zero points, 4 bits each    (zero point j = bits 4j+3:4j)
beat 1        : 32 FP16 scales of groups 0..31  (scale j     = bits 16j+15:16j)
beats 2..33   : groups 0..31, 128 weights each  (weight i    = bits 4i+3:4i)
beat 34       : scales of groups 32..63
beats 35..66  : groups 32..63
...           : (twice more, for groups 64..127)
```

The demultiplexer keeps one zero-point beat and one scale beat. It hands
every weight beat on together with its own zero point and scale. Every weight
beat is one group and one dot-engine input, so the engine gets 128 weights
per cycle. A 4096 x 4096 matrix takes 1024 super-blocks (8.7 MB); a row
takes 32 beats.

The published description of this format gives both "64 weights per
transaction" and "all the scales for 2,048 weights in one transaction of 16
scales". These cannot both hold. This design uses 128 weights per beat: that
fills the 512-bit bus, matches the 128 multipliers, and makes the 2,048 and
32-transaction figures consistent.

### KV cache: blocks with a scale-zero line

Keys and values are quantized per token and per head. Each 128-value head
vector has one scale `s` and one zero point. The quantized bytes of a token
take two beats: dims 0..63, then 64..127. The scale and zero point form a
32-bit pack `{8'h00, zp[7:0], s[15:0]}`. Sixteen packs fill one bus line.
For each (layer, head) the cache is a contiguous region of blocks:

```
block b (2112 bytes): [scale-zero line of tokens 16b..16b+15][token 16b: 2 beats]...[token 16b+15]
```

So one head's cache for tokens 0..p-1 is a single burst. Packs are produced
one per (layer, head, token), so they arrive in (layer, head) order.
`kv_sz_fifo` keeps one 512-bit element per (layer, head): 1024 elements.
Each new pack pops the element at the head, writes the pack into slot
`token mod 16` and pushes the element back. When slot 15 is filled, the line
is complete and is written to memory (`kv_to_mem`). Until then, the line for
the newest block exists only on chip. A cache read that ends inside such a
block therefore takes its line from the chip, and the demultiplexer drops
the stale line that comes from memory.

The address map used by the command generator and `kv_to_mem`:

| region | stream address |
|---|---|
| embedding table (FP16) | 0 |
| layer l: LN1, LN2, W_Q, W_K, W_V, W_O, W_gate, W_up, W_down | 262.1 MB + l * 105.2 MB |
| final norm, LM head | 3627.2 MB |
| K cache, (layer, head) entry e | 0xE000_0000 + e * 135168 |
| V cache | 0xE840_0000 + e * 135168 |

Everything ends at 0xF080_0000, inside 4 GB (see *Capacity* below).

### Four ports, one stream

Stream address `A` is split over the ports as follows. Port `k` reads
`(A >> 2) + k * 1 GB` for a quarter of the length. The 16 bytes that port `k`
returns for beat `n` become bits `128k+127:128k` of stream beat `n`. The data
must be stored the same way: quarter `k` of every 64-byte line in plane `k`.
`data_sync` gives each port its own FIFO and releases a 512-bit word only
when all four have a beat. A port that runs ahead is held there, and its lag
shows on the `stall` output.

## Dot engine

`dequant` turns the 128 4-bit weights of a beat into the exact FP16 integers
`q - z`. `vpu_dot` multiplies them with the matching 128-value slice of the
operand vector. It sums the products in a 7-level adder tree, multiplies the
sum by the group scale (once per group, not per weight) and accumulates the
groups of a row. A row's result leaves 10 cycles after its last beat. The
engine takes a beat every cycle and never back-pressures.

The same engine serves attention:

* **key cache**: each token (two 64-byte beats, joined by `dequant`) is its
  own dot product with the rotated query, so it gives one score per token;
* **value cache**: the *weighted sum* mode. For token `t` the operand lane
  `t mod 128` holds its probability `p_t`. The multipliers form
  `p_t * s_t * (q_i - z_t)` and 128 lane accumulators add these over the
  tokens. After the last token the whole 128-value head output leaves at
  once and goes into the operand buffer as one slice. This mode is this
  design's way of doing the original's "scaled dot product with the value
  cache" with the existing multipliers.

## Scalar units

All of them take one element per cycle, the rate at which the dot engine
produces results. At hidden size 4096 that is one result per 32 cycles.

* **RoPE** (`rope`). The rotator holds the first half of q or k. When element
  `j+64` arrives, it outputs the pair `x_j cos - x_{j+64} sin` and
  `x_{j+64} cos + x_j sin`. The angles come from two ROMs, both computed at
  elaboration. The first holds 2048 inverse frequencies `10000^(-i/4096)`,
  stored as turns per token in 32-bit fixed point, so that
  `position * frequency` wraps modulo one turn by itself. The second holds
  4096 points of a quarter sine wave, addressed by the top 14 bits of that
  product.
* **QK local** (`qk_local`) stores the rotated query. It accumulates `q.k`
  as the rotated key arrives, so the current token's score never needs the
  key from memory.
* **Softmax** (`softmax`) works in three passes over a buffer: maximum, sum of
  `exp(x - max)`, then outputs multiplied by `1/sum`. The inputs are the
  cache scores followed by the local score, all scaled by `1/sqrt(128)`.
* **Residual and mean square** (`residual_sqsum`) hold the hidden state.
  Each element of W_O or W_down output is added into it and
  `x^2 / N` is accumulated as it goes by.
* **RMSNorm** (`rmsnorm`) has two passes. The first (the mean square) is
  bypassed because the residual unit already formed it. The second
  multiplies each element by `1/sqrt(mean square)` (from a table) and by
  its norm weight.
* **SiLU** (`silu`) computes `g / (1 + e^-g)` for each gate element and
  keeps it in a FIFO. It multiplies by the matching up-projection element
  when that arrives.
* **KV quantization** (`kv_quant`) has two passes over a head vector. The
  first finds min and max, then `s = (max - min)/255` and
  `z = ceil(min/s)`. The second gives `q = round(x/s) - z`, clamped to
  0..255. The pack stores `zp = -z`, so a value is recovered as
  `(q - zp) * s`.

## On-chip operands and ordering rules

`operand_buffer` keeps three banks of up to 86 slices of 128 FP16 values:

| bank | first holds | then holds | read by |
|---|---|---|---|
| 0 | normalized hidden state | | W_Q, W_K, W_V, W_gate, W_up, LM head |
| 1 | rotated query | softmax probabilities | K cache, V cache |
| 2 | head outputs (one slice per head) | SiLU products | W_O, W_down |

The scalar results are written element by element with their index. The
dot engine reads one slice per beat, and the same slices are read again for
every row. The stream runs ahead of the scalar units, so three rules keep the
two consistent. Each is the reason for one of the mechanisms the end-to-end
test checks.

1. **Operand stall.** A bank is marked empty when the demultiplexer takes the
   command whose results will refill it. W_Q, for example, marks bank 1,
   because its results become the new query. A beat whose slice has not been
   written yet waits at the demultiplexer. This happens, for example, at the
   first W_Q of a layer while RMSNorm is still producing.
2. **Value read after write.** The value-cache read of a head includes the
   current token. It is not issued to memory until that token's value bytes
   and pack have been written.
3. **On-chip scale-zero line.** A key-cache read takes the line of an
   unfinished block from the head of the key FIFO, or from the copy made
   when this head's pack was just added. A value-cache read takes the copy
   made when its value pack was added.

The other orderings follow from the schedule. For example, the softmax of a
head cannot finish before the value projection has started.

## Arithmetic

All datapath arithmetic is IEEE binary16, written as functions in
`llm_pkg` so every unit rounds alike: round to nearest even, subnormals
flushed to zero, overflow to infinity, no NaN. exp, 1/x and 1/sqrt(x) are
table-based units (`fp16_exp`, `fp16_recip`, `fp16_rsqrt`) whose tables are
computed at elaboration. The mean square is accumulated as `x^2/N` with the
`1/N` shift applied before squaring, so it stays finite up to an RMS of 256.
A plain FP16 sum of squares would overflow at an RMS of 4 for N = 4096.

## Capacity and rate at the default size

* Weights: 3695 MB in this format (embedding 262 MB, 32 layers of 105 MB, LM
  head 68 MB). KV cache for 1024 tokens: 277 MB. Together they end at
  0xF080_0000, inside the 4 GB DDR; almost nothing is left for an operating
  system.
* One beat per cycle at 300 MHz is 19.2 GB/s. A token reads about 3.43 GB
  of weights (the embedding table is read one row at a time), so the ceiling
  is about 5.6 tokens/s. It drops a little as the cache grows, by
  2 x 135 kB per (layer, head) at 1024 tokens. The interlock of rule 2 costs
  a few hundred cycles per head, under 1% of a token.

## Where this departs from, or adds to, the original

* 128 weights per beat, where the published text gives two inconsistent
  numbers (see *Weights*).
* The KV block layout, the address map and the four-port plane mapping are
  this design's own. The original splits its data between the upper 2 GB
  (embedding, weights and the cache of the first 16 layers) and the lower
  2 GB, where the bare-metal program keeps 1 MB. This design lays
  everything out contiguously from address 0, with the cache at
  `K_BASE`/`V_BASE`. Moving the regions means editing the address
  functions in `mm2s_cmdgen`.
* The current token's key is used on chip (local score). Its value is
  written first and then read back with the cache (rule 2).
* The weighted-sum mode of the dot engine, the three operand banks, and the
  mean-square accumulator are additions of this design.
* Scores are scaled by `1/sqrt(128)`, as standard attention requires. The
  original does not mention this step.
* The original names a "StateCtrl" block in its memory unit without
  describing it. Here the type of each stretch of stream travels with its
  command instead.
* Norm weights are fetched as plain FP16 vectors just before each norm.
* The original writes the second quantization pass as `(x - z) * s`, which
  is the recovery formula. This design quantizes with `round(x/s) - z` and
  recovers with `(q - zp) * s`, `zp = -z`.
* The inverse-frequency table has 2048 entries, `10000^(-i/4096)`, which
  spans the hidden size rather than one head. Pair `j` of a 128-wide head
  reads entry `32 j`, which gives the usual per-head frequency
  `10000^(-2j/128)`. The original does not say how the table is indexed.
* The original says a scale-zero line goes to memory "once we begin" the
  16th token. Here it is written while token 16 of the block (position
  `16 n + 15`) is processed, right after that token's pack is added.
* Not built: the AXI data movers and HP ports, the DDR, and the host
  processor. Their command and data signals are ports of `llm_accel_top`.

## Verification

Every module has a self-checking testbench in `tb/` that compares it with an
independent double-precision or behavioural model. Each prints
`TB_RESULT checks=N failures=M`.

`tb_llm_accel_top` runs the whole accelerator on a small model:

* 2 layers, hidden 512, 4 heads of 128, MLP 768, vocabulary 256;
* a 48-token cache and 40 tokens, the first 20 as prompt tokens, so the
  cache spans three 16-token blocks and two scale-zero lines per head are
  flushed;
* a memory model whose four ports deliver with random gaps, and a random
  write ready.

It builds the model in memory in the formats above and compares the logits
with a double-precision reference. The reference uses the same 8-bit cache
quantization. The largest logit error is about 4% of the largest logit. The
test also counts these mechanisms and fails if any never occurs:

* port-skew stalls
* operand stalls
* value read-after-write waits
* scale-zero lines flushed to memory
* cache reads ending in an on-chip line
* RMSNorm bypass
* the skipped key read at position 0
* local scores
* weighted-sum mode
* skipped LM heads

The run takes about 1.9 million cycles, 20 seconds of simulation. At this
size the value read-after-write count is large, because it counts every
cycle the value-cache command is held. That command is ready as soon as
W_V of the same head has been issued, so the count includes the W_V stream
itself, not only the gap after it. The cycles in which the command is held
and no beat reaches the dot engine are the real cost: 483 per head in this
run, memory-model latency included. At the default size that would be
about 0.5 million cycles per token, under 1% of the 53.6 million a token
takes.

That small model is the largest configuration simulated end to end. A run
at the default sizes would need a 3.7 GB memory image in the testbench and
tens of millions of cycles per token, so there is no full-size end-to-end
test. All blocks compile and lint at their default sizes.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_llm_accel_top \
    rtl/llm_pkg.sv tb/tb_fp16_pkg.sv rtl/*.sv tb/tb_llm_accel_top.sv -o sim
./obj_dir/sim
```

(`llm_pkg.sv` must come first. Listing it again through `rtl/*.sv` only
gives a duplicate-package warning.)

## Files

| file | block |
|---|---|
| `llm_pkg.sv` | sizes, stream types (`cmd_t`, `vbeat_t`), FP16 functions |
| `axil_regs.sv` | host registers |
| `mm2s_cmdgen.sv` | read schedule of one token |
| `cmd_split.sv`, `data_sync.sv` | four-port split and join |
| `stream_demux.sv` | stream formats |
| `dequant.sv`, `vpu_dot.sv` | dot engine |
| `operand_buffer.sv` | on-chip activation banks |
| `rope.sv`, `qk_local.sv`, `softmax.sv` | attention scalar units |
| `residual_sqsum.sv`, `rmsnorm.sv`, `silu.sv` | residual, norm, MLP gating |
| `kv_quant.sv`, `kv_sz_fifo.sv`, `kv_to_mem.sv` | KV cache write path |
| `fp16_exp.sv`, `fp16_recip.sv`, `fp16_rsqrt.sv`, `sync_fifo.sv` | helpers |
| `llm_accel_top.sv` | the accelerator |
