# An int8 Llama 2 forward-pass kernel in SystemVerilog

This is a single-token inference engine for a small Llama 2 model: the
110M-parameter TinyStories checkpoint (embedding width 768, 12 layers, 12 attention heads,
feed-forward width 2048, vocabulary 32000, context of 1024 tokens). A host program hands the
kernel a token and its position. The kernel runs one forward pass through the transformer
and writes the 32000 vocabulary logits to a buffer the host can read. The host samples the
next token from the logits and calls the kernel again.

The design targets an FPGA with weights in off-chip DRAM. Two ideas shape it:

* **All weight matrices are int8 with per-group fp32 scales** (the "Q8_0" scheme). A weight
  row is cut into groups of 64. Each group stores 64 signed bytes `q` and one fp32 scale
  `s = max|w| / 127`, so `w ≈ q·s`. Activations are quantised the same way just before each
  product. The inner loop is therefore integer multiply-accumulate. Everything else stays in
  IEEE single precision: RMSNorm weights, the residual stream, softmax, SiLU and RoPE.
* **Weights are streamed, never stored.** Each matrix is read once per token as a burst
  stream at 64 bytes per cycle, and it is consumed as it arrives. Two 256-bit AXI4 read ports
  issue the same bursts to two memory channels. Their data words are joined into one 512-bit
  *beat*, and a beat is exactly one quantisation group. The matrix–vector unit therefore does
  one 64-lane int8 dot product per cycle, at the rate memory delivers weights.

The design follows the architecture of the HLSTransform accelerator. That accelerator was
written in C++ for a high-level-synthesis flow and runs on a Xilinx VU9P at 250 MHz. This RTL
implements the same kernel in hand-written SystemVerilog. The section
[Where this RTL departs from the reference design](#where-this-rtl-departs-from-the-reference-design)
lists the differences.

## One forward pass

`llama_forward` is the top. A controller steps through the following sequence. The units
work one at a time, and each unit has its own internal pipeline.

```
x   = dequant(embedding[token])                        embed_dequant   (weights streamed)
for layer l = 0..11:
    xb  = rmsnorm(x, w_att[l])                          rmsnorm         (weights streamed into regs)
    q,k,v = Wq·Q(xb), Wk·Q(xb), Wv·Q(xb)                quantize + matmul_q8
    q,k = rope(q, k, pos)                               rope
    cache[l][pos] = k, v                                kv_cache, one head per cycle
    xb  = attention(q, cache[l][0..pos])                attention
    x   = x + Wo·Q(xb)                                  quantize + matmul_q8, residual_add
    xb  = rmsnorm(x, w_ffn[l])
    hb  = W1·Q(xb);  hb2 = W3·Q(xb)
    hb  = silu(hb) * hb2                                swiglu
    x   = x + W2·Q(hb)
x = rmsnorm(x, w_final);  logits = E·Q(x)              E = embedding table (tied)
```

`Q(·)` is the group quantiser. Vectors live in fully partitioned register arrays, so the
units read or write many elements per cycle. The key/value cache is the only large on-chip
memory.

### Interface of the top

| signal | dir | meaning |
|---|---|---|
| `ap_start` / `ap_idle` / `ap_done` | in / out / out | HLS-style block control. `ap_start` is sampled while idle. `ap_done` pulses for one cycle at the end. |
| `token[31:0]`, `pos[15:0]` | in | Sampled on start. |
| `m_ar*`, `m_r*` `[2]` | AXI4 | Two read-only AXI4 masters. `arsize` = 32 bytes, INCR bursts of up to 64 beats, up to 4 outstanding. |
| `out_valid`, `out_idx`, `out_data` | out | Logits, one fp32 per cycle, index 0..VOCAB-1 (the shared buffer). |
| `rd_error` | out | Sticky. Set when a read response was not OKAY. |

Both AXI ports always carry identical addresses. Port *p* returns bytes `32p..32p+31` of each
512-bit beat, so the weight image is split byte-wise over two channels. Beat address *b* is
byte address `32·b` on each channel.

### Weight image layout (in 512-bit beats)

Every tensor starts on a 64-beat boundary. The order is: the embedding table, then for each
layer `rms_att, Wq, Wk, Wv, Wo, rms_ffn, W1, W2, W3`, and finally `rms_final`.
`llama_pkg::tensor_base()` computes the offsets.

* A quantised matrix of `d` rows by `n` columns stores its rows one after another. Each row
  starts with `ceil(n/64/16)` beats of fp32 group scales, 16 per beat, with scale *j* in bits
  `32·(j%16)+:32`. These are followed by `n/64` beats of int8 weights, with weight *k* of a
  group in bits `8k+:8`. A 768-wide row is 1 + 12 beats. A 2048-wide row is 2 + 32 beats.
* An fp32 vector of `n` entries takes `n/16` beats.

At full size the image is about 1.85 million beats (118 MB).

## The units

**`axi_burst_reader`.** It accepts a command (first beat and length) and splits it into INCR
bursts of at most 64 beats that never cross a 64-beat boundary. It keeps up to four bursts in
flight and issues each burst on both ports, which may accept it on different cycles. Read data
is passed on only when *both* ports hold a valid beat, so the two halves of a beat always
belong together. A downstream stall back-pressures both R channels. Assertions check AXI
address stability and that both ports deliver their last beats together. Without memory
stalls the unit sustains one beat per cycle: the testbench measures 1000 beats in 1007
cycles.

**`matmul_q8`.** This is a two-stage pipeline at one beat per cycle:
1. 64 int8×int8 products and an adder tree give the group's int32 dot product.
2. The dot product is converted to fp32, multiplied by the weight and activation group scales,
   and added to the row's fp32 accumulator.

The scale beats at the start of a row are captured into a small register file. A `d × n`
product takes `d·(ceil(n/1024) + n/64) + 2` cycles. For example, Wq takes 9986 cycles and the
classifier 416 002.

**`quantize`.** For each group of 64 it finds `max|x|` (one element per cycle), computes
`127/max` with the divider, and emits `q = round(x·127/max)` for 64 elements at once. The scale
is `max/127`. An all-zero group gets scale 0 and codes 0.

**`rmsnorm`.** It first sums squares, one element per cycle. Then it computes
`sqrt(mean + 1e-5)` and the reciprocal with the iterative units, and finally multiplies
`w[i]·(inv·x[i])` one element per cycle. The latency is about 2N + 60 cycles.

**`rope`.** The rotation angle for pair *i* of a head is `pos · 10000^(−i/64)`. It is formed
exactly in fixed point as a fraction of a turn. The per-pair frequencies are constants computed
at elaboration as `10000^(−2p/64)/(2π)·2^40`, and the product is taken modulo one turn. A
quadrant fold and a 30-iteration CORDIC then give cos and sin to well within 1e-6. Each head's 32
query pairs, and the key pairs when present, rotate in parallel: one head per cycle after the
CORDIC.

**`kv_cache`.** These are two synchronous memories, keys and values. Each word is one head
(64 fp32 = 2048 bits), addressed by `(layer·SEQ_LEN + pos)·N_KV_HEADS + kv_head`. The read data
appears one cycle after `r_en`.

**`attention`.** It processes one query head at a time and reuses key/value head
`h/(N_HEADS/N_KV_HEADS)` (grouped-query attention). It runs these phases:
* *iterate*: one cached key per cycle into 64 multipliers and an adder tree, scaled by 1/8.
* *max*.
* *exp/sum*: with the iterative exponential, about 27 cycles per position.
* *norm*: one reciprocal, then one multiply per cycle.
* *acc*: one cached value vector per cycle into 64 accumulators.

A head costs roughly 30 cycles per cached position plus a constant.

**`swiglu`.** It computes `h1/(1+exp(−h1))·h3` one element at a time, using the exponential
and the divider in sequence (about 55 cycles per element, 113 k cycles for 2048 elements).

**`residual_add`.** 16 fp32 adders, 49 cycles for 768 elements.

**`embed_dequant`.** It converts the token's embedding row to fp32, 64 lanes per beat.

**Arithmetic (`fp32_pkg`, `fp32_div`, `fp32_sqrt`, `fp32_exp`).** The package holds
combinational IEEE-754 single-precision add, multiply, conversions and comparisons. All of
them round to nearest-even and flush subnormals to zero. Division (restoring, 26 steps),
square root (digit by digit, 25 steps) and exponential are multi-cycle units with a
start/done handshake. The exponential works as follows:
* It computes `exp(x) = 2^(x·log2 e)`, forming `x·log2 e` in Q8.24 × Q2.30 fixed point.
* The integer part becomes the exponent.
* `2^f` for the fraction is a product of constants `2^(2^−k)`, one per fraction bit, so it
  takes 24 steps.

These units are accurate to about one ulp. The arithmetic is exact rather than
piecewise-linear, as in the reference design.

## Timing of a whole pass

At full size with memory that never stalls, a pass at position 0 takes **3 422 418 cycles**.
1.85 M of these are the weight stream itself. Most of the rest is the element-serial SwiGLU,
at about 1.36 M over the 12 layers. Each earlier position adds about 30 cycles per head per
layer in attention, about 4.3 k cycles per position. Averages per pass:
* 256-token run: about 4.0–4.2 M cycles, or 16–17 ms at 250 MHz.
* 1024-token run: about 5.6–6.4 M cycles.

For comparison, the HLS reference reports an average of 4.38 M cycles (17.5 ms) for both run
lengths.

## Where this RTL departs from the reference design

* **64 weights per cycle.** The reference design reads "64 8-bit integers per cycle" over two
  256-bit ports, and that rate is implemented here. Its per-loop timing report, however,
  implies about 32 weights per cycle in the matrix loops. For example, a 768×768 product takes
  20 900 cycles, about 27 per row.
* **Group size 64.** The reference design quantises in equal "sections" without giving the
  size. The GGML Q8_0 format it cites uses 32. Here the group is 64, so that one beat is one
  group.
* **Sequential schedule.** The units never overlap. Each step finishes before the next one
  starts, and the weight stream stops between steps.
* **Iterative nonlinear units.** exp, divide and sqrt are digit-serial units, not pipelined
  cores. This makes SwiGLU and the softmax exponentials element-serial, so long contexts are
  slower than in the reference design.
* **KV cache on chip.** The cache is a plain synchronous array of 2 × 147 456 words of 2048
  bits (75.5 MB at full size). That is within the VU9P's total BRAM+URAM on paper, but a real
  build would place it in URAM banks or in DRAM behind another AXI port.
* **Vocabulary and hidden sizes.** 32000 and 2048 are the values of the TinyStories 110M
  checkpoint. The embedding table doubles as the classifier.
* **Not built.** The host program, the runtime and DMA, the DRAM and its controller are not
  built. The top's token/position inputs, AXI masters and logit stream are where they attach.

## Verification

Each unit has a self-checking testbench in `tb/` that compares it with double-precision
reference arithmetic on random data. Where the design has a rate, the testbench also checks
the cycle count (burst reader, matrix unit, normalisation, exp/div/sqrt latencies). Shared
testbench pieces:

* `tb_check.svh`: counters, clock and reset, tolerance checks, watchdog.
* `tb_weights_pkg`: a synthetic, hash-generated int8 weight image of any model size. It is
  also inverted into beats.
* `axi_mem_model`: a two-channel AXI4 read slave with queued bursts, latency and random
  `arready`/`rvalid` stalls.
* `llama_ref.svh`: a double-precision forward pass with the same quantisation steps.

End-to-end tests:
* **`tb_llama_forward`** uses a reduced model: dim 128, hidden 256, 2 layers, 2 query heads
  sharing 1 KV head, context 8, vocabulary 64. It runs tokens at positions 0..7 against a
  stalling memory and checks every logit of every call (max error ≈ 1e-6). It also counts
  that memory stalls, multi-burst streams, attention over several positions, grouped-query
  sharing and complete logit vectors all occurred.
* **`tb_llama_forward_full`** runs the full 110M configuration with default parameters. It
  performs one pass at position 0 and checks all 32 000 logits and the cycle count. The check
  bounds are 2 % of the largest logit per element and 2 % rms. The fp32 kernel and the
  reference occasionally re-quantise an activation one code apart, and over 12 layers that
  gives about 0.5 % rms difference. The pass simulates in about 30 s.

Run any testbench with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Itb --top-module tb_llama_forward \
    rtl/fp32_pkg.sv rtl/llama_pkg.sv tb/tb_weights_pkg.sv rtl/*.sv tb/axi_mem_model.sv \
    tb/tb_llama_forward.sv && obj_dir/Vtb_llama_forward
```

Each testbench prints `TB_RESULT checks=N failures=M`.

## Changing it

The model size comes from the top's parameters: `DIM`, `HIDDEN`, `N_LAYERS`, `N_HEADS`,
`N_KV_HEADS`, `SEQ_LEN` and `VOCAB`. They must satisfy these rules:
* `DIM` and `HIDDEN` are multiples of 64.
* The head size `DIM/N_HEADS` is even.
* `N_HEADS` is a multiple of `N_KV_HEADS`.

The weight layout follows automatically from `llama_pkg`. The bus width and lane count are
tied together: `AXI_DW·N_PORTS/8` must equal the group size of 64.
