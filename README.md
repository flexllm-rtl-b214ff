# A stage-customized LLM inference core with low-bit linear arrays and a long-context memory plug-in

Running a decoder-only language model has two phases with very different
hardware needs. **Prefill** processes the whole prompt at once, so every
weight that is read can be reused across many tokens. **Decode** produces one
token at a time, so each weight is used once per token and the phase is
limited by memory bandwidth.

This RTL implements a core with a separate datapath for each phase. Both use
quantized integer arithmetic:

* **Prefill linear array**: a TP x WP two-dimensional systolic array. TP
  tokens share each streamed weight and WP output channels are computed in
  parallel.
* **Decode engine**: one instance of every layer type (quantizer, linear
  array, dequantizer, normalization, rotary embedding, softmax, activation,
  Hadamard rotation, sampling), reused over time for every layer of the
  model. The linear array splits its WP multipliers into BP parallel 1D
  systolic chains that all receive the same token. Nearly all decode
  parallelism therefore comes from weight width, which matches the
  bandwidth-bound phase.
* **Long-context plug-in** (hierarchical memory): a long prompt is cut into
  1024-token segments. Each segment is compressed into one memory
  embedding. Later segments retrieve a summary of the past from a queue of
  the newest N memories by cross-attention. The backbone's attention window
  therefore stays one segment long, however long the prompt is.

Default parameters give the configuration for a 1B-parameter Llama-3.2 model
on an HBM FPGA card:

| Parameter | Value |
|---|---|
| Model dimensions | d = 2048, d_kv = 512, d_ffn = 8192, vocabulary 128256, 16 layers |
| Prefill array | TP = 8 tokens, WP = 24 channels (the K/Q/V/O projection array) |
| Decode INT4 array | BP = 16 chains, WP = 1024 PEs |
| Decode INT8 attention array | WP = 256 PEs |
| Memory plug-in | N = 64 memories, D = 2048, 4 lanes |

## Number formats

All non-integer values use `fx_t`: 32-bit two's complement with 16 fraction
bits (Q16.16). This covers activations, scales, offsets, probabilities and
normalized values. Products are rounded to nearest and every narrowing
saturates (`flexllm_pkg::fx_mul`, `fx_sat`). The reference design works in
floating point, so this is a deliberate simplification. Its precision is
enough for the testbench tolerances below; it was not evaluated on real
model accuracy.

The linear layers multiply integers:

| Where used | Quantization |
|---|---|
| Projections, FFN and lm_head | **Dynamic asymmetric per-token INT4**. The quantizer measures min and max of each token and sets s = (max - min)/15 and b = min. |
| Attention products (Q·K^T and P·V) | **Static symmetric per-tensor INT8**. The scale s is a preloaded constant and b = 0. |

Asymmetric codes 0..15 are sent as -8..7 so that every PE multiplies signed
numbers. The emitted offset is raised by 8s to compensate, so the identity
X ≈ s·q + b holds for what leaves the quantizer.

The dequantizer rebuilds each output channel j as

```
Y[j] = s_X · s_W[j] · Σ_k q_X[k]·q_W[k][j]  +  b_X · s_W[j] · Σ_k q_W[k][j]
```

It holds the per-channel weight scale `s_W[j]` and the column sum
`Σ_k q_W[k][j]` in on-chip buffers, which the host loads through the `dq_*`
port. The second term is where the asymmetric offset returns, so the integer
array never has to see it.

## The linear arrays

### Prefill: `prefill_linear`

Work is done per group of TP tokens:

1. **LOAD** buffers the group's input vectors, one input channel of all TP
   tokens per beat.
2. **FEED** streams the weights of one tile of WP output channels, one input
   channel per beat.
3. Each weight enters the top of its column. Each token's value enters the
   left of its row. Row t and column j are delayed by t and j cycles, so
   x[t][k] and w[k][j] meet in PE(t, j).
4. PEs are output stationary. A "first" flag travels with input channel 0 and
   clears the accumulator.
5. After in_dim beats, **DRAIN** waits TP + WP cycles until the last product
   reaches the far corner.
6. **OUT** presents the TP x WP tile for one cycle.

Weights are streamed again for each token group. One tile takes
in_dim + TP + WP + 2 cycles. A layer therefore takes about
`ceil(L/TP) · ceil(d_out/WP) · d_in` cycles, which is the ideal
`L·d_in·d_out/(TP·WP)` plus drain overhead.

### Decode: `decode_linear`

1. The token is loaded once (`in_dim` values, LANES per beat).
2. One weight beat of WP values is consumed per input channel (FEED).
3. The WP PEs form BP independent chains of WP/BP PEs.
   * The input value enters PE 0 of every chain and moves one PE per cycle.
   * Weight p of a chain is delayed by p cycles in a skew register so that it
     meets that value.
4. After the chain length has drained, the WP results of the tile are copied
   to an output buffer (CAPT).
5. The buffer is streamed out LANES channels per beat, while the next tile is
   already being fed (double buffering).
6. Tiles repeat until `out_dim` channels are done, and the last tile may be
   partial.

Time per tile is in_dim + WP/BP + 3 cycles, so a d_in x d_out layer takes
about `d_in · d_out / WP` cycles.

## The decode engine: `flexllm_top`

A host-side scheduler sends one operation per command: `cmd_op` from
`flexllm_pkg::op_e` plus sizes. The engine does the following:

* It routes the `x` operand stream (and the `aux` stream for norm weights,
  gate and residual) to the selected unit.
* It returns that unit's output on `y`.
* It pulses `op_done` after the last result beat.

Only one operation runs at a time. The exception is the linear chain, where
quantizer → linear array → dequantizer run as one streaming pipeline:

* **OP_QLINEAR4** uses the dynamic INT4 quantizer, the 1024-wide INT4 array
  (weights on `w4_*`) and the INT4 dequantizer.
* **OP_QLINEAR8** uses the static INT8 quantizer, the 256-wide INT8 array and
  the INT8 dequantizer. Its "weight" stream `w8_*` carries key or value cache
  rows read from off-chip memory. That is how attention scores and the
  attention-weighted sum use the same array structure.

| Op | Unit | Notes |
|---|---|---|
| OP_NORM | `rmsnorm` | y = x / sqrt(mean(x²)+2⁻¹⁶) · g. g arrives on `aux` during the output phase. About 200 cycles of bit-serial divide / square root / reciprocal per vector. |
| OP_ROPE | `rope` | Pairs (2i, 2i+1) are rotated by pos·θ^(−2i/64) with θ = 500000. Phase is a 32-bit fraction of a turn. The quarter-wave sine table (1025 entries) is computed at elaboration. Latency 1 cycle. |
| OP_SOFTMAX | `softmax` | Three passes: max; exp and sum; one reciprocal then scale. exp uses 2^x with a quadratic for the fraction (about 0.3 % error). Lanes past `len` output 0. |
| OP_SWISH | `swish` | x·sigmoid(x) with a 4-segment piecewise-linear sigmoid (error ≤ 0.02). Latency 1 cycle. |
| OP_GATE / OP_RESIDUAL | `gate_mul` / `residual_add` | Element-wise product or saturating sum of `x` and `aux`. Latency 1 cycle. |
| OP_FHT | `fht` | Walsh–Hadamard transform of 2^log2n elements, scaled by 1/sqrt(n). n/LANES cycles per radix-2 stage, with a halving after every second stage to stay in range. |
| OP_SAMPLE | `argmax_sampler` | Greedy: index of the largest logit, lowest index on ties. The vocabulary size comes from `cmd_out_dim`. |

A full transformer layer is the usual sequence of these commands:

1. norm
2. INT4 Q/K/V projections
3. RoPE
4. INT8 Q·K^T
5. softmax
6. INT8 P·V
7. INT4 O projection
8. residual
9. norm
10. INT4 up and gate projections
11. swish
12. gate
13. Hadamard rotation
14. INT4 down projection
15. residual

The host keeps the KV cache and weights in off-chip memory and streams them
in. The Hadamard rotation is applied online to the input of the down
projection; the matching rotation is assumed to be folded into those weights
offline. That spreads outliers so INT4 per-token quantization loses less.

## The long-context plug-in

**`hmt_segment_processor`** emits the two backbone inputs of segment n as a
stream of token descriptors `{stage, source, index}`. The embeddings stay in
memory, so the consumer fetches them by descriptor. The two inputs are:

* Stage 1: `[T : first half of Seg_n : T]`, where T is a topic token. The
  backbone's output at T is the segment summary S_n.
* Stage 2: `[P_n : last 32 tokens of Seg_{n−1} : Seg_n : P_n]`. The backbone
  output at P_n is the new memory Mem_n.

The processor waits between stages for `pn_done` (P_n has been produced) and
for `mem_done` (Mem_n has been queued).

**`hmt_memory_queue`** keeps the newest N memories in a circular buffer and
replays them oldest first, LANES elements per cycle.

**`hmt_memory_attention`** computes
`P_n = Σ_i softmax_i(S_n·Mem_i / sqrt(D)) · Mem_i`:

1. It asks the queue for one replay to form the N dot products.
2. It runs them through its own softmax instance.
3. It asks for a second replay to accumulate the weighted sum.

An empty queue (the first segment) gives P_n = 0 without a replay. One
segment costs about 2·N·D/LANES cycles, 65536 at the default size.

## Interfaces and timing conventions

* Inputs use valid/ready. A beat transfers on a rising edge where both are
  high.
* Outputs are valid-only: the consumer must take every output beat. Every
  unit is built so that it never needs to stall its output.
* `start` is a one-cycle pulse that latches the sizes. Data beats start the
  cycle after it.
* `done` pulses one cycle after the last output beat.
* Every vector length must be a multiple of the lane count, except softmax,
  which pads.
* Reset is asynchronous and active low.
* The systolic PE registers are deliberately not reset. A stale flag leaves
  the array within TP+WP cycles, and each accumulator is cleared by the first
  beat of a tile.

## How far it has been checked

Every module has a self-checking testbench in `tb/`. Each one:

* compares against a real-number model (or exact integers for the arrays);
* checks cycle counts where a rate is claimed (linear arrays, quantizer,
  norm, softmax, FHT, segment processor);
* ends with one line `TB_RESULT checks=N failures=M`.

`tb_flexllm_top` runs every decode operation, a prefill layer and a
five-segment long prompt through a reduced-size core. It counts the
mechanisms it exercised and fails if any never happened: weight-stream
stalls, operand back-pressure, both quantization modes, switching between
prefill and decode, empty-queue bypass, queue wrap-around and both plug-in
stages.

`tb_flexllm_top_full` builds the core at its default size and runs:

* a 2048 x 2048 INT4 projection, which takes 4621 cycles for 4096 weight
  beats;
* a residual add;
* sampling over the full 128256-token vocabulary;
* one plug-in segment.

To run a testbench:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/flexllm_pkg.sv tb/tb_<name>.sv --top-module tb_<name>
./obj_dir/Vtb_<name>
```

The full-size build takes several minutes to compile. Simulation takes under
a second.

## Where this design departs from the reference architecture

| Topic | Reference design | This RTL |
|---|---|---|
| Arithmetic | Floating point | Q16.16 fixed point |
| Layer normalization | Called LayerNorm | RMSNorm (what Llama uses) |
| Activation and exp | – | Piecewise-linear and polynomial approximations, with errors as listed in the table above |
| Prefill engine | A K/Q/V/O array (WP 24), an INT8 attention array (WP 16) and an FFN array (WP 96), running concurrently as a dataflow pipeline | One TP x WP array, configured for the K/Q/V/O shape; the other two shapes are further instances of the same module with WP = 16 or 96. Prefill non-linear and quantization steps reuse the decode engine's units. |
| Decode engine | Modules overlap as a stream pipeline inside a layer | One operation at a time, except the quantize/linear/dequantize chain. Latency for the linear layers is the same, and the non-linear steps add their own time. |
| Memory attention | Cross-attention | No learned projections |
| Sampling | Sampling | Greedy only |
| Memory and host side | Off-chip memory (KV cache, weights), host runtime, floorplanning and the HLS tool flow | Not part of this RTL: weights, KV rows and embeddings arrive on stream ports |
| lm_head | – | Its 128256 output channels exceed the dequantizer's 8192-entry scale buffer. The host issues it as 16 commands of at most 8192 channels, reloading the scales between them. |
| Sizes | – | Built at the U280 default parameters. The larger V80 configuration is a parameter change (BP=64, WP_INT4=4096, WP_MHA=1024, TP=16, WP_PREFILL=32, 8 lanes in the memory attention) and has not been simulated. |

Estimated throughput at the default size, counting linear layers only:

* Decode: about 1.2 million cycles per token (4.2 ms at 292 MHz).
* Prefill of 1024 tokens on a single prefill array: about 2.0·10⁹ cycles.
  This is several times slower than the concurrent arrays of the reference
  design would manage.
