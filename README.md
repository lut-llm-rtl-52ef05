# LUT-LLM: a transformer-layer accelerator that multiplies by table lookup

This RTL implements an FPGA accelerator for decoder-only language models (sized for
Qwen3 1.7B). Its linear layers have no multipliers. Activations and weights are both
vector-quantized: every pair of values is replaced by the index of the nearest of a few
centroids. With both sides quantized, a dot product between an activation pair and a
weight pair reduces to one entry of a small precomputed table:

    T[a][w] = <activation centroid a, weight centroid w>      (INT8, per weight group)

A projection `y = W x` then becomes "find the nearest activation centroid for each input
pair, then add up table entries". This turns a compute-bound problem into a
memory-bandwidth problem, which suits an FPGA with HBM and many small on-chip RAMs.
Attention, SwiGLU and RMSNorm stay in FP32.

Main configuration:

| symbol | meaning                                | value |
|--------|----------------------------------------|-------|
| v      | vector length (values per centroid)    | 2     |
| c_a    | activation centroids per codebook      | 64    |
| c_w    | weight centroids per codebook          | 16    |
| G      | outputs sharing one weight codebook    | 512   |
| l      | dPEs per search chain                  | 16    |
| -      | table entries                          | INT8 unsigned, per-tensor scale and shift |

## 1. What one projection computes

Take an M x D projection. The D inputs of a token are split into D/v pairs. Pair k has
its own activation codebook (c_a centroids of v FP32 values). Its nearest centroid,
under the Chebyshev distance `max_i |x_i - c_i|`, gives index a_k.

The M outputs are split into groups of G. For each group g and input pair k there is:

* a 2D table `T_{g,k}[a][w]` of c_a x c_w INT8 entries;
* a weight-index vector `widx_{g,k}[0..G-1]`, naming the weight centroid of each output's
  weight pair.

Output m of group g is

    acc[m] = sum_k  T_{g,k}[ a_k ][ widx_{g,k}[m] ]
    y[m]   = float(acc[m]) * scale + shift

Here `scale` and `shift` are per-tensor constants. They undo the zero-point quantization
of the tables, summed over all lookups. The host folds that sum into `shift`.

## 2. The LUTLinear engine (`lutlinear_engine`)

The engine holds N_PAIRS = 8 lanes. Each lane has a centroid search unit (`bpcsu`), an
index FIFO (`idx_fifo`) and a table-lookup engine (`psum2d`). The lookup engines form a
serial chain: each adds its contribution to the partial sums arriving from the previous
one. The last engine feeds the accumulator (`lut_accumulator`), which feeds the
dequantizer (`dequantizer`).

One beat of input is 8 pairs x 2 values = 16 activations of one token. A projection is
run as D/16 **passes** along the hidden dimension. Within a pass, **all tokens** stream
through. This is the key loop order. It loads each lane's codebook once per pass, and
lets the centroid search pipeline across tokens without reloading. The inverse order
(all passes for one token) would reload codebooks for every token.

For each pass the loaders supply, in any overlap:

1. the 8 codebooks (`cb_we`, one centroid per cycle, then `cb_loaded`);
2. the tokens' input beats (`in_valid/in_ready`);
3. the 2D tables (`lut_we`, WR_ROWS = 8 rows per cycle) and weight indices (`widx_we`,
   one group of G per cycle), then `lut_loaded`.

The search may start as soon as the codebooks are in, while the tables are still loading.
Indices wait in the FIFOs. The input is flow-controlled by credits, so a FIFO can never
overflow: `in_ready` drops when FIFO_DEPTH tokens are outstanding. After the last token
of a pass, `pass_done` pulses and the buffers may be refilled. After the last pass, the
accumulator drains through the dequantizer as 16-value output beats.

### 2.1 Centroid search: `dpe` and `bpcsu`

A `dpe` stores one centroid. It computes the Chebyshev distance to the input vector and
passes on whichever is smaller: the incoming running minimum, or its own distance and
index. Ties keep the earlier index.

dPEs are arranged in chains of l = 16. The input vector travels with the running minimum,
so a chain accepts one new vector per cycle. Four chains cover the 64 centroids in
parallel, and a 2-level registered argmin tree combines them.

* Latency: l + log2(c_a/l) = 18 cycles.
* Throughput: one search per cycle.

The chain length trades latency against comparator count. It is picked so that the
search latency hides under the time needed to fetch one pass's tables. With 1024 bits
per cycle of table bandwidth per unit, c_a = 64 and c_w = 16, this gives l = 16.

### 2.2 The 2D lookup engine: `psum2d`

Per lane the engine holds a table buffer of NT_MAX x c_a rows, each row c_w INT8
entries. It also holds a G-entry weight-index register per group. A 4-stage pipeline
processes one group of G outputs per cycle:

| stage | register           | action |
|-------|--------------------|--------|
| 0     | index register     | capture the activation index (first lane) or the cascaded sums (other lanes) |
| 1     | LUT row registers  | read row a of group t's table into ROW_COPIES = 4 duplicated copies; each copy drives G/4 multiplexers, to limit fan-out |
| 2     | expanded output    | value-copy multiplexers: output m takes `row[widx[m]]` |
| 3     | SIMD adder         | G adders add the expansion to the cascaded output register |

The first lane starts a group when its index FIFO is not empty and the tables are
loaded. Every other lane fires when the cascaded sums of the previous lane arrive. Each
lane pops its own FIFO entry after the token's last group, so the 8 searches and the
chain stay aligned.

### 2.3 Accumulator, execution control and dequantizer

`lut_accumulator` keeps G 32-bit sums per (token, group). On the first pass it writes;
on later passes it adds.

The drain command carries a destination code, `dest_e`: HBM, Q, K, V, SwiGLU gate,
SwiGLU up or RMSNorm. That code travels with every output beat. This destination code is
the "execution control". It lets one time-shared engine feed different consumers, one
projection after another. The consumers receive the data as a stream.

`dequantizer` computes `float(acc) * scale + shift` for 16 lanes per cycle. It uses a
valid/ready handshake, so back-pressure from a consumer stalls the drain.

## 3. The layer around the engine (`lut_llm_top`)

The top level has these parts:

* **Input selection.** A projection reads its activations from the input-reader port
  (`lin_src = 0`, data from off-chip memory) or from the global buffer (`lin_src = 1`).
  For the buffer, a read pointer steps token by token within a pass, then beat by beat.
  One buffer word of 16 values is exactly one engine input beat.
* **Destination routing.** The destination code selects where each output beat goes: the
  output-writer port, the attention engine (Q/K/V), the SwiGLU unit (gate/up) or the
  RMSNorm unit.
* **Global buffer** (`act_buffer`). TOK_MAX x D_MAX FP32 values. It is written by the
  RMSNorm unit, the SwiGLU unit and the attention engine, in that fixed priority.
* **SwiGLU** (`swiglu_unit`). The gate projection's outputs are turned into
  `silu(g) = g * sigmoid(g)` and stored. When the up projection arrives, the unit writes
  `silu(g) * u`.
* **Residual + RMSNorm** (`rmsnorm_unit`). It adds each incoming row to the residual stream
  it keeps, stores the sum and accumulates the sum of squares. It then streams out
  `h * rsqrt(mean(h^2) + eps) * gamma`. With `norm_add_residual = 0`, the row itself
  becomes the residual (the first layer's input).
* **Attention** (`attention_engine`). Grouped-query attention with 16 query heads over
  8 KV heads of 128, all in FP32:
  * RoPE (rotate-half form, cos/sin table loaded through `rope_*`) is applied to Q and
    the new K.
  * The new K and V rows are written into the on-chip KV buffer at positions
    `pos_base + token`, behind the cached rows prefetched through `kv_in_*`. They are
    also streamed out on `kv_out_*` to be appended to the off-chip KV cache.
  * For each token and head, the engine computes causal scores `q.k_j / sqrt(128)`
    (128-wide dot products, one key per cycle), then the softmax with the running
    maximum subtracted, then the value sum (one value row per cycle). It writes 16
    values per beat into the global buffer.

A layer is a sequence of start/done handshakes on the top's ports, driven by the host:

    [input reader] -> proj -> RMSNorm (no residual)        normalised input in buffer
    buffer -> Q, K, V projections -> attention             context in buffer
    buffer -> O projection -> RMSNorm (+ residual)         normalised h in buffer
    buffer -> gate -> SwiGLU ;  buffer -> up -> SwiGLU     FFN activation in buffer
    buffer -> down projection -> output writer

Off-chip memory and its read/write engines are outside the RTL. The top exposes their
streams as ports:

| ports | stream |
|-------|--------|
| `ir_*` | input reader |
| `cb_*` | centroid reader |
| `lut_*`, `widx_*` | table / weight-index reader |
| `ow_*` | output writer |
| `kv_in_*`, `kv_out_*` | KV access |

## 4. Floating point (`fp32_pkg`)

All FP32 arithmetic is in one package of combinational functions: add, multiply, compare,
int/float conversion, exp, reciprocal and reciprocal square root. Its simplifications:

* Subnormals are flushed to zero.
* Results are truncated toward zero; there is no NaN.
* exp uses `2^n * p(f)`, with p a degree-6 polynomial; relative error about 1e-6.
* Reciprocal and rsqrt start from the usual bit-trick seed and take three Newton steps;
  relative error below 1e-4.

These functions are not pipelined. Every FP operation is a single-cycle combinational
path, which a 250 MHz implementation would have to pipeline.

## 5. Parameters

The top-level defaults are the full-size configuration.

| parameter | default | origin |
|-----------|---------|--------|
| N_PAIRS | 8 | derived from the table bandwidth (32 HBM channels x 256 bit, 1024 bit/cycle per lane) |
| V, CA, CW, G | 2, 64, 16, 512 | quantization scheme |
| L_CHAIN | 16 | dPE chain length |
| LANES | 16 | = N_PAIRS x V |
| M_MAX, D_MAX | 6144 | largest projection (FFN size) |
| TOK_MAX | 128 | longest prefill evaluated |
| S_MAX | 384 | longest context evaluated (128 + 256) |
| HIDDEN, FFN, HD, NH, NKV | 2048, 6144, 128, 16, 8 | Qwen3 1.7B model sizes |
| FIFO_DEPTH, WR_ROWS, ROW_COPIES | 32, 8, 4 | implementation choices |

The model sizes (hidden 2048, FFN 6144, 28 layers, 16/8 heads of 128) come from the
public Qwen3 1.7B configuration, not from the accelerator description.

For the Qwen3 1.7B runs with [input, output] lengths [32|128] x [16|64|256]:

* The prefill of at most 128 tokens fits TOK_MAX.
* The context of at most 384 positions fits S_MAX.
* The FFN projections use all 12 groups of 512 and all 384 passes.

## 6. Where this RTL departs from the described architecture

* **No double buffering in LUTLinear.** Codebooks, tables and weight indices are
  single-buffered. Loading pass p+1 waits for `pass_done` of pass p, instead of
  overlapping the current pass.
* **Attention phases are sequential.** The score, exponent, value-sum and normalisation
  phases run one after another per (token, head). The described design has concurrently
  streaming GEMM/GEMV engines. The arithmetic is the same.
* **Residual before normalisation.** The architecture diagram draws the RMSNorm block
  ahead of the residual block. This unit adds the residual first and normalises the sum,
  the usual pre-norm block order. The un-normalised sum is kept as the new residual.
* **No QK-norm.** Qwen3's per-head RMSNorm on Q and K is not implemented.
* **Table quantization.** The description clamps table entries to [0, 256], which does
  not fit 8 bits. Here tables are unsigned 0..255. The zero point is handled by the
  per-tensor shift, which the host computes.
* **Layer control is not built.** There is no on-chip layer sequencer, and no HBM,
  readers or writers. The host drives the top's command and stream ports.
* **FP32 simplifications.** See section 4.

## 7. Files and verification

`rtl/` holds one module or package per file:

* `fp32_pkg`, `lut_llm_pkg` (shared constants, `dest_e`)
* `dpe`, `bpcsu`, `idx_fifo`, `psum2d`, `lut_accumulator`, `dequantizer`, `lutlinear_engine`
* `act_buffer`, `swiglu_unit`, `rmsnorm_unit`, `attention_engine`, `lut_llm_top`

Each has a self-checking testbench `tb/tb_<module>.sv`. The testbenches compare against
double-precision models written independently of the RTL (`tb/tb_fp_pkg.sv` converts
between `real` and FP32 bits). Each prints `TB_RESULT checks=N failures=F`.

* `tb_bpcsu` checks the 18-cycle search latency.
* `tb_lutlinear_engine` runs a 3-pass projection at reduced size and requires credit
  stalls to occur.
* `tb_lut_llm_top` runs the whole layer program at reduced size: 3 tokens after 1
  cached position, hidden 8, 4 heads of 4. It checks every stage against a model fed
  with the values observed at that stage's input, checks every buffer read against a
  shadow of the buffer writes, and fails if any of these never happened:
  * both input sources and all seven destinations;
  * credit stalls, the residual add;
  * KV prefetch and write-out;
  * back-pressure on the output writer and the KV port.
* `tb_lut_llm_top_full` instantiates the top with its defaults and runs a 2-token,
  2-pass, 512-output projection from the input port to the output port, checking every
  value.

To run one test with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/fp32_pkg.sv rtl/lut_llm_pkg.sv \
        tb/tb_fp_pkg.sv tb/tb_lut_llm_top.sv -y rtl -y tb --top-module tb_lut_llm_top
    ./obj_dir/Vtb_lut_llm_top

The full-size top takes about a minute to compile.

Lint notes that remain on purpose:

* Assertions sample `rst_n` synchronously while the flops reset asynchronously
  (SYNCASYNCNET).
* Zero fills of the 16384-bit cascade bus exceed Verilator's replication warning
  threshold (WIDTHCONCAT).
* `cas_in_grp` of `psum2d` is read only by an alignment assertion.
