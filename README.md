# AccLLM accelerator: RTL of a long-context LLM inference engine

Generating text with a large language model on an edge FPGA runs up against three things.
First, the weights are large. Second, during decoding every weight is read once per
token, so the work is bound by memory bandwidth. Third, the key/value (KV) cache grows
with the length of the context. This accelerator addresses all three by co-designing the
model compression with the hardware:

* **2:4 structured sparsity.** In every group of four weights, two are zero. The array
  stores only the two non-zero weights, plus a 2-bit index for each that tells which
  activation it meets.
* **Mixed low precision (W2A8KV4 in the main configuration).** Weights are 2-bit (8-bit
  for the small fine-tuned low-rank parts), activations are 8-bit and the KV cache is
  4-bit. A single DSP multiplier is packed so that it computes two products per cycle
  at every precision (8x8, 8x4 and 8x2).
* **Lambda-shaped attention.** Each query attends only to a few "sink" tokens at the
  start of the sequence and to a window of the most recent tokens. The KV cache
  therefore has a fixed size however long the context grows.
* **One reconfigurable compute engine (RCE)** serves both phases of inference. In the
  matrix-matrix (MM) mode it handles the prefill of many tokens; in the vector-matrix
  (VM) mode it handles single-token decode. Two fusions keep data on chip: attention is
  fused into one pass (scores, exp, running sum, exp x V, final divide), and in decode
  one layer's output is requantised straight into the next layer's input buffer.

The RTL models the on-chip part of the accelerator: the compute array, the on-chip
buffers, the controller, the exp/sum, divide, SiLU and RMS-normalisation parts of the
nonlinear engine and the Lambda KV address unit. Off-chip HBM/DDR, the PCIe host and
the RoPE unit of the nonlinear engine are not included (see *Departures and limits*).

## Compute array (RCE)

The array has `T` tiles. Each tile has `M` PE blocks, and each PE block has `R`
multiplier lanes feeding an adder tree and a 32-bit accumulator. The default is
R=32, M=16, T=16, so 8192 product lanes in all (`accllm_pkg::R_DEF/M_DEF/T_DEF`).

```
 input bank t ──► sparse selectors ──► dsp_pack pairs ──► pe_block (adder tree + acc) ──► acc[t][m]
 weight bank t*M+m (R weights + R 2:4 indices) ───┘
```

`rce` picks the mode:

| mode | activations fed to tile t | weights fed to block m of tile t | result `acc[t][m]` |
|------|---------------------------|----------------------------------|--------------------|
| MM (prefill) | token t's chunk (input bank t) | bank m of tile 0, the same for every tile | token t, output channel m |
| VM (decode)  | token 0's chunk, the same for every tile | bank t*M+m | output channel t*M+m |

So an MM beat advances T tokens x M channels, and a VM beat advances one token x T*M
channels. Each beat is one chunk of R weights per block. The first beat of a group
restarts the accumulators; later beats add to them.

### Sparse selector (`sparse_selector`)

In sparse mode a chunk covers 2R dense activations (R/2 groups of four). Lane `r` takes
`x_dense[4*(r/2) + idx[r]]`: lanes 2j and 2j+1 hold the two kept weights of group j,
and their indices pick the matching activations. In dense mode lane `r` takes
`x_dense[r]` from the half of the input word the controller selects. The selector is
combinational, and sparse mode is only allowed with 2-bit weights (an assertion in
`rce_tile` checks this).

### Packed DSP multiplier (`dsp_pack`)

One DSP48E2-style slice computes `P = (A + D) * B` with a 27-bit pre-adder and a
27x18 multiplier. Two weights that share an activation, or two products at 2-bit
weights, are packed into one slice:

| precision | A | D | B | products |
|-----------|---|---|---|----------|
| `P8X8`, `P8X4` | sign-extended w1 | w2 << 18 | {10'b0, x} | `x*w1 = P[15:0]`, `x*w2 = P[33:18] + P[17]` |
| `P8X2` | sign-extended w1 (2 bits) | w2 << 22 | {x2, 2'b0, x1} | `x1*w1 = P[9:0]`, `x2*w2 = P[41:32] + P[31]` |

Activations are unsigned 8-bit and weights signed. The lower product is sign-extended
into the upper field, which is off by a borrow. Adding back the bit just below the
upper field (`P[17]`, `P[31]`) removes it. In `P8X8`/`P8X4` the two products belong to
PE blocks 2i and 2i+1 (same activation, two weight columns). In `P8X2` they belong to
two lanes of one block (two activations, two weights). The products are registered,
one edge after `en`.

### PE block (`pe_block`) and tile timing

`pe_block` sums its R 16-bit products and loads the sum (`first`) or adds it to its
accumulator. In a tile, the selector and DSP take one edge and the accumulate takes a
second. `acc` therefore reflects a beat two edges after it was presented.

## Buffers and address layout

| buffer | banks | word | default depth |
|--------|-------|------|---------------|
| Weight/KV | T*M, bank t*M+m feeds block m of tile t | R weight bytes, then R 2-bit indices at bit 8R+2r | 128 |
| Input | T, bank t = token t of an MM group (bank 0 in VM) | 2R activation bytes | 256 |
| Output | 1 | M 32-bit sums | 1024 |

All three use `buffer_ram`: one write port with byte enables, and one read port with
registered data. Keys and values are stored in the Weight/KV banks just like weights.
Host loads of the Input buffer, and reads of the Output buffer, are taken while
`busy = 0`. The Weight/KV buffer has its own write port, so the host can load one half
while a command reads the other half (ping-pong streaming from HBM).

The controller computes addresses as follows:

* weight word `wb_base + g*n_chunks + k` for output group g, chunk k;
* input word `ib_base + k` (sparse: 2R elements per chunk), or `ib_base + k/2`, half
  `k%2` (dense: R elements per chunk);
* output word: VM mode `ob_base + g*T + t` (channel o sits in word o/M, lane o%M);
  MM mode `ob_base + t*ob_stride + g` (token t);
* requantised element: VM `el_base + (g*T+t)*M + m` in input bank 0; MM
  `el_base + g*M + m` in input bank t. Element e is byte e%(2R) of word e/(2R).

## Controller and command set

The host writes one `cmd_t` (see `accllm_pkg`) over a valid/ready handshake. `busy`
stays high until the command completes, and `done` pulses at the end.

* **OP_LINEAR** streams `n_chunks` chunks into each of `n_groups` output groups, one
  chunk per cycle, then drains the T x M accumulators one tile per cycle. The drain
  does one of three things:
  * `DR_STORE` writes the sums to the Output buffer.
  * `DR_ACCUM` adds them to what the Output buffer already holds. Fused attention uses
    this for its last stage, and a layer whose input does not fit one weight-buffer
    pass uses it to add up partial sums.
  * `DR_REQUANT` shifts the sums right by `shift`, saturates them to uint8 and writes
    them into the Input buffer as the next layer's activations. This is the decode
    layer fusion; no round trip to DDR is needed.

  A VM linear command takes `n_groups*(n_chunks + T + 3) + 1` cycles from acceptance
  to `done`. The end-to-end testbench checks this count.
* **OP_EXP** passes `n_groups` Output words (attention scores) through the exp unit.
  It writes the exp values into Input bank 0 from element `el_base` on, where they
  become the activations of the exp x V product, and adds them to the running sum.
* **OP_DIV** divides each of `n_groups` Output words by the exp sum, in place.
* **OP_NORM** normalises a vector of `n_groups` Output words in place. Pass 1 feeds
  every word to the RMS unit. That unit forms `rms = floor(sqrt(sum(x^2) >> shift))`;
  the vector has 2^shift elements. Pass 2 divides every word by `rms` on the divider.
* **OP_SILU** passes each of `n_groups` Output words through the SiLU unit, in
  place. It takes two cycles per word (read, then write).

### Fused attention, step by step

For one decode query and a block of keys:

1. QK^T: OP_LINEAR, VM, with K rows in the Weight/KV banks and DR_STORE. This gives
   T*M scores per group.
2. OP_EXP: `e = exp(scaled score)` in fixed point, lanes masked beyond the filled KV
   cache, `sum += e`. The e values go to the Input buffer.
3. e x V: OP_LINEAR with V in the Weight/KV banks and DR_ACCUM into the attention
   output. Steps 1-3 repeat for each key block, so the full score row is never stored.
4. OP_DIV: output / sum.

### Exp unit (`npe_softmax_exp`)

The exponential is base 2 and in fixed point:
`s = score >>> shift`, `y = max(bias - s, 0)`, `e = LUT[y%4] >> (y/4)` with
`LUT = {127, 107, 90, 76}` (127 * 2^(-k/4)). So `e ≈ 127 * 2^((s - bias)/4)`, a
7-bit value that can be fed to the multiplier as an activation. The host chooses
`shift` (score scaling) and `bias` (the reference level, normally the row maximum).
Masked lanes give 0. Results are registered, one edge after `valid`.

### Divider (`npe_divider`)

The divider computes M quotients in parallel with a restoring algorithm:
`quo = (num << FRAC) / den`, FRAC = 8, 40 iterations. `done` rises
32 + FRAC + 1 edges after the edge that samples `start`.

### SiLU unit (`npe_silu`)

`y = x * s(x)` on signed sums with 8 fractional bits. The sigmoid `s` is piecewise
linear in |x|, using only shifts and adds:
`|x|/4 + 0.5` below 1, `|x|/8 + 0.625` below 2.375, `|x|/32 + 0.84375` below 5, and 1
above that. For negative x, `s(-x) = 1 - s(x)`. The sigmoid error stays under 0.02, so
the SiLU error stays under about 0.025|x|. The unit is combinational on the Output
buffer's read data, and the controller writes the result back.

### RMS unit (`npe_rms`)

The normaliser divides a token vector by its root mean square. LLaMA-style models
normalise this way: the mean is not subtracted. The unit adds up `x^2` over the M
lanes of each word it is given, in 64 bits. On `go`, it shifts the sum right by
`shift` to form the mean, then takes the integer square root. The root uses the
restoring digit-by-digit method: one result bit per cycle, 32 cycles, with `done` on
the 33rd edge. The result is at least 1. The division itself reuses the attention
divider, so normalised values have 8 fractional bits. The learned per-channel gain is
not applied; it can be folded into the next layer's weights.

## Lambda-shaped KV cache (`lambda_kv_addr`)

The cache holds 4 sink tokens and a 2044-token window, 2048 slots in all. Token
position `pos` maps to slot `pos` if `pos < 4`, otherwise to
`4 + (pos - 4) mod 2044`. A token that lands on an occupied window slot overwrites
(evicts) the oldest window entry; `kv_evict` flags this, which happens once
`pos >= 2048`. `kv_n_valid = min(pos + 1, 2048)` is the number of live keys. The
exp unit uses it to mask key lanes past the end of a partly filled cache. The
logic is combinational.

## Top level (`accllm_top`)

The top wires together the controller, the RCE, the T*M weight banks, the T input banks
(the host load port or the controller's write-back, muxed by `busy`), the Output
buffer, the exp unit, the divider, the SiLU unit, the RMS unit and the KV address unit. Its ports stand in for the
parts outside the chip:

* the command port, for the host over PCIe;
* the weight/KV load port, for HBM;
* the input load port and the output read port, for DDR;
* `kv_pos`, `kv_slot`, `kv_evict` and `kv_n_valid`, the Lambda cache interface;
* `exp_sum`, the current softmax denominator.

## Simulating

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=F` and has a cycle watchdog. With plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/accllm_pkg.sv rtl/*.sv tb/dsp_pack_tb.sv --top-module dsp_pack_tb
./obj_dir/Vdsp_pack_tb
```

For the whole design, add the shared test program `tb/accllm_top_driver.sv` to the
file list:

* `accllm_top_tb` runs it at R=8, M=4, T=2, in seconds.
* `accllm_top_full_tb` runs it at the default size (32 x 16 x 16). The C++ build takes
  about 12 minutes on one core; the simulation itself takes seconds. `-j` helps.

The program runs these, all checked against reference values it computes itself:

* a two-layer decode chain (a sparse P8X2 layer requantised in place, then a dense
  P8X8 layer), with the second layer's weights loaded while the first one runs;
* an MM-mode P8X4 prefill, then RMS normalisation of one token's output;
* a fused-attention pass over two key blocks with a partly filled cache;
* SiLU of the second layer's outputs;
* a walk of the KV positions across the eviction point.

It counts each mechanism (sparse beats, each precision, each mode, the exp masking,
requantisation, accumulation, divide, SiLU, normalisation, eviction, weight loads during a command) and fails if one never occurred.

## Departures and limits

* **Fixed-point nonlinear engine.** The original NPE works in floating point. Here the
  exp is a base-2 LUT-and-shift approximation, the divide is integer, and the
  reference level (`bias`) comes from the host rather than from a running maximum.
* **Not built:** RoPE. It is only named as part of the NPE, with no structure given,
  so the host (or an added unit) must rotate Q and K. SiLU is built, but the
  elementwise product of the gated FFN's two branches is not.
* **Normalisation** is RMS normalisation (no mean subtraction) over power-of-two
  lengths, although the NPE's unit is called a layernorm.
* **Quantisation parameters are not applied on chip.** The per-group (64) weight
  scales and zero points and the per-token activation scales are not modelled.
  Activations are treated as unsigned 8-bit and weights as plain signed integers,
  and requantisation is a single right shift.
* **Buffer depths and the command format** are this design's own. The depths are 128
  weight words, 256 input words and 1024 output words. At d_FFN = 11008, a 2:4-sparse
  row needs 172 weight words, so such a layer is issued as two commands joined by
  DR_ACCUM.
* **DSP packing fields.** The field positions follow the packing figure. Its printed
  bit fields add up to 54 bits, more than the slice's 48-bit P, so the widths here are
  the ones that are arithmetically exact for unsigned activations.
* **Sink count.** The design uses 4 sink tokens plus 2044 window tokens, the main
  description. A "2 + 2044" split is also mentioned.
* **Prefill attention** runs through the same commands, but there is no per-row causal
  or Lambda mask in MM mode; masking is per key lane, from `kv_n_valid`.
* **Off-chip memories and host** are represented only by ports.
