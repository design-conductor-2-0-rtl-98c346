# VerTQ: a TurboQuant KV-cache compressor and compressed-space attention engine

VerTQ sits between an LLM inference host and its memory, and manages the
key/value (KV) cache for the host. It does two things:

- **COMPRESS.** It turns FP16 key and value vectors into TurboQuant codes of
  about 3.7 bits per element, 4.3x smaller than FP16.
- **ATTEND.** It computes the attention output of a single decode-step query
  over those codes without decompressing them. The computation is
  FlashAttention-style with an online softmax.

This directory holds a synthesizable SystemVerilog model of that chip. The
model follows the block structure of the published VerTQ block diagram:

- mailbox and on-chip transport;
- nine 256-bit memory interfaces;
- key and value compressor engines;
- query pre-decode;
- eight attention lanes and the attention output stage;
- a library of custom floating-point elements.

The arithmetic inside each block is this design's own.

## 1. What is stored per token

Head dimension D = 128 (Qwen3-4B). Each vector is handled as follows.

**Key: TurboQuant-Prod, 3 + 1 bits.**

1. Store the key norm `n_k` as FP16, and normalise the key to `u = k/n_k`.
2. Rotate the unit vector: `y = H·diag(s)·u / √D`. H is the 128-point
   Walsh-Hadamard matrix, and `s` is a fixed pseudo-random ±1 sign vector.
3. Quantise each coordinate `y_i` to the nearest of 8 levels
   `c_j = {±0.2451, ±0.7560, ±1.3440, ±2.1520}/√D`. This is the 3-bit
   Lloyd-Max codebook for a Gaussian, which is what a coordinate of a randomly
   rotated unit vector looks like. The 128 indices take 384 bits.
4. Rotate the dequantised vector back, and form the residual
   `r = u − RHT⁻¹(ĉ)`. Store its norm `γ = ‖r‖` as FP16.
5. Project the residual with a fixed random ±1 (Rademacher) matrix S, and
   store the 128 signs `sign(S·r)` (QJL, one bit per element).

A compressed key is 384 + 128 + 16 + 16 = 544 bits, or 4.25 bits per element.

**Value: TurboQuant-MSE, 3 bits.** Steps 1 to 3 are the same as for the key.
The value's FP16 norm and its 384 index bits take 400 bits, or 3.125 bits per
element.

A token (`ckv_t`, 944 bits) is therefore 16·256/944 ≈ 4.34x smaller than the
raw FP16 K and V.

The sign vector and the Rademacher matrix are not stored. Both come from
xorshift32 generators with fixed seeds (`rht_signs`, `rad_column` in
`vtq_pkg`), so they are constants of the hardware. The columns of S are
regenerated as they are needed.

## 2. Scoring without decompressing

For a query q, the estimator of `q·k` is:

```
q·k ≈ n_k · ( Σ_i qr_i · c[idx_i]  +  γ · √(π/2)/D · Σ_j qs_j · (±1)_j )
```

where `qr = RHT(q)` and `qs = S·q`.

The query pre-decode block computes `qr` and `qs` once per ATTEND. The two
transforms run in parallel.

The first sum is where the "16x fewer multiplies" of the inner loop comes
from. The rotated query is added into 8 bins, one bin per codebook index:
`bin[j] = Σ_{idx_i=j} qr_i`. This takes only additions. The score then needs
8 multiplies (`Σ_j c_j·bin[j]`) instead of 128. The QJL sum is also
additions only, since it adds or subtracts `qs_j` by the stored sign. A lane
multiplies the result by `n_k/√D` (the usual 1/√D attention scaling) to get
the score.

The same trick is not used for values. Each dequantised value coordinate is
`n_v·c[idx_i]`, and it is folded into a D-wide multiply-add accumulator.

## 3. Attention lanes, online softmax and the output merge

Each of the 8 lanes (`vtq_attn_lane`) keeps a FlashAttention state:

- a running max `m`;
- a running sum `l`;
- a 128-wide FP32 accumulator `A`, kept in the rotated domain.

For each token, the lane computes:

```
m' = max(m, s)     α = exp(m−m')     β = exp(s−m')
l  = l·α + β       A = A·α + β·n_v·c[idx_v]
```

A token occupies a lane for D+12 = 140 cycles:

- 128 cycles binning and sign-summing the key;
- 8 cycles for the multiplies;
- a few cycles for the score and the softmax update;
- one cycle to update the D-wide accumulator.

The engine (`vtq_flash_attn`) deals tokens to the lowest-numbered idle lane.
It stalls the transport when all 8 lanes are busy, so in steady state 8
tokens are in flight.

When every token has been scored, the output stage (`vtq_attn_output`) merges
the lanes one per cycle:

1. It takes `M = max m_k` and `f_k = exp(m_k − M)`.
2. It sums `L = Σ f_k·l_k` and `A = Σ f_k·A_k`.
3. It scales by 1/L.
4. It applies the inverse rotation once, and converts to FP16.

The inverse rotation is linear, so applying it once per query instead of once
per token gives the same result.

## 4. Floating-point elements

Every operation uses FP32 functions in `vtq_pkg`. FP16 is used only for
storage (the KV vectors, the norms and the output). The functions are:

- add/sub, mul, and multiply-then-add (not fused);
- max;
- reciprocal and rsqrt;
- sqrt;
- exp(−x) for x ≥ 0;
- FP16↔FP32 conversion.

`vtq_fp_unit` wraps them as a registered, op-selectable unit that the
testbenches exercise directly.

The simplifications are:

- denormals are treated as zero on input and flushed to zero on output;
- no NaN/Inf handling;
- round-to-nearest-even.

The iterative functions work as follows:

- **Reciprocal:** seed `48/17 − 32/17·m`, then 3 Newton steps.
- **rsqrt:** the 0x5f3759df seed, then 3 Newton steps.
- **exp(−x):** write `x = k·ln2 + f`, evaluate a fifth-order Taylor polynomial
  of `e^{−f}` by Horner's rule, and subtract k from the exponent.

Measured against real arithmetic:

- add, sub and mul are correctly rounded;
- reciprocal, rsqrt and sqrt are within 1e-6 relative error;
- exp(−x) is within 6e-4 relative error, which is ample for softmax weights.

## 5. Engines and timing

Each engine is a small state machine that starts on a `start` pulse and
raises `done` for one cycle. Counts are clock edges from `start` to `done`:

| block | work per cycle | latency |
|---|---|---|
| `vtq_vec_norm` | one square-accumulate, then rsqrt, then D parallel multiplies | D+2 |
| `vtq_rht` | one full Hadamard stage (D/2 butterflies) | log2 D + 1 |
| `vtq_rademacher` | one matrix column (D add/sub) | D |
| `vtq_codebook_bank` / `vtq_dequant_bank` | all D coordinates | 1 |
| `vtq_key_compressor` | norm, RHT, quantise, dequantise, RHT⁻¹, residual, norm ∥ Rademacher | 284 |
| `vtq_value_compressor` | norm, RHT, quantise | 142 |
| `vtq_attn_lane` | see §3 | 140 per token |

Measured end to end at the default size, with a memory that stalls 15% of
the time:

| operation | cycles |
|---|---|
| COMPRESS of 64 tokens | 19,574 |
| ATTEND over 64 tokens | 1,373 |
| ATTEND over 3 tokens | 340 |

At the 125 MHz target, a 64-token ATTEND takes about 11 µs.

## 6. Host and memory interface

**Memory.** There are 9 banks of 256 bits. Each has its own `vtq_mem_if`:
a valid/ready request with a 2-entry FIFO and in-order, registered read
data. All banks of one operation use the same row address (24 bits). The
row layouts are:

- **Raw FP16 vector (K, V, query or output):** banks 0-7, element i in
  bits 16i+15:16i.
- **Compressed token:** banks 0-3, with the `ckv_t` struct (compressed key
  then compressed value) from bit 0 up.

Bank 8 is not used by these layouts.

**Mailbox (`vtq_mailbox`).** A 3-bit address, 32-bit register file:

| addr | register | meaning |
|---|---|---|
| 0 | CMD | write 1 = COMPRESS, 2 = ATTEND; ignored while busy |
| 1 | SRC_A | first K row (COMPRESS) / query row (ATTEND) |
| 2 | SRC_B | first V row / first compressed row |
| 3 | DST | first compressed row / output row |
| 4 | COUNT | number of tokens |
| 5 | STATUS | `{completed[15:0], 14'b0, done, busy}`; any write clears `done` |

`irq` follows `done`.

**Transport (`vtq_transport`).** It sequences the commands:

- **COMPRESS:** for each token, read the K row and the V row, run both
  compressors in parallel, then write the token row.
- **ATTEND:** read the query, start the engine, then stream COUNT token rows
  into it, honouring its back-pressure. When the engine finishes, write the
  FP16 output row.

## 7. Where this model departs from the published design

- **Throughput and unit count.** The published engines are deeply pipelined
  arrays of FP16 units. Their printed sizes are:
  - RHT: 320 units;
  - Rademacher: 254 units;
  - key compressor: about 770 units;
  - value compressor: about 385 units;
  - attention engine: about 3,400 units.

  Here each engine processes one vector at a time. Its per-cycle width is of
  the same order: a whole Hadamard stage, a whole Rademacher column, or a
  whole accumulator update per cycle. The function is the same, but COMPRESS
  throughput is one token every ~300 cycles, not one per few cycles.
- **Precision.** The published design uses FP16 wherever it can and FP32 for
  softmax accumulation. This model uses FP32 for all arithmetic. Its results
  are therefore at least as accurate, but it is larger per unit.
- **Unspecified choices made here.** These are not given by the published
  design:
  - the codebook values;
  - the sign and matrix generators;
  - the FP16 norm fields;
  - the token layout;
  - the register map;
  - the command set;
  - the memory handshake;
  - the lane-dispatch policy.
- **No decompression path.** The published chip also reads decompressed
  K/V back for the host and works on cache entries or pages. This model has
  only the two commands above. It cannot return a decompressed vector, and
  it does not model paging.
- **Host integration.** The vLLM integration is not modelled. The host side
  is the mailbox ports.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each compares against a
real-valued (double-precision) model in `tb/vtq_tb_pkg.sv`. That model does
not use the design's FP functions: it has its own Hadamard transform,
Rademacher product, quantiser, score estimator and attention. Each testbench
prints `TB_RESULT checks=N failures=M`.

`tb_vtq_top` runs the whole chip at its default parameters, against the
behavioural memory `tb/vtq_mem_model.sv` (random ready stalls, 3-cycle read
latency). It runs three operations:

1. **COMPRESS of 64 tokens.** It checks every field of every token:
   - the norms;
   - that each index is the nearest level;
   - the residual norm;
   - the QJL signs.
2. **ATTEND over 64 tokens.**
3. **ATTEND over 3 tokens.**

The ATTEND outputs must match the real-valued compressed-space attention to
0.3% of the output's largest element. Against exact FP attention, the cosine
similarity is 0.975.

The testbench also counts the following, and fails if any count is zero:

- memory stalls;
- lane-full back-pressure;
- both commands;
- an ignored command written while busy;
- completion interrupts;
- multi-lane merges.

To run a testbench with Verilator, list the packages first:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  --top-module tb_vtq_top \
  rtl/vtq_pkg.sv tb/vtq_tb_pkg.sv tb/vtq_mem_model.sv \
  $(ls rtl/*.sv | grep -v vtq_pkg) tb/tb_vtq_top.sv
./obj_dir/Vtb_vtq_top
```

The full-size end-to-end test builds in about three minutes and simulates in
seconds.

## 9. Changing the design

- `D` (head dimension, a power of two), the codebook and the seeds live in
  `rtl/vtq_pkg.sv`.
- `LANES` is a parameter of `vtq_top` and `vtq_flash_attn`.
- A different codebook needs `CB_N01`/`TH_N01` and the testbench level table
  `LV` updated together.
