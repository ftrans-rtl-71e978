# FTRANS-style Transformer accelerator in SystemVerilog

A Transformer spends most of its arithmetic, and most of its weight storage,
in dense matrix-vector products. This design runs whole encoder-decoder
Transformers on one chip by storing the large feed-forward weight matrices
in **block-circulant** form. Each d x d matrix is cut into b x b blocks.
Every block is a circulant matrix, so it is fully described by one
b-element vector. This shrinks its storage by a factor of b. A block times a
vector becomes a circular convolution, which costs O(b log b) through an FFT
instead of O(b^2).

The accelerator keeps all weights on chip. Only the embedding table stays in
external DRAM. It runs the layers of a Transformer one after another:
multi-head attention on dense processing elements, and the feed-forward
networks on FFT-based processing elements.

Default sizes describe the small "shallow" Transformer used for the
evaluation:
- model width 200
- 4 heads of width 50
- 2 encoder layers and 2 decoder layers
- block size 8
- 16-bit fixed point

## Numbers

| Quantity | Format |
|---|---|
| Activations and weights | `word_t`: signed 16-bit, Q8.8 (8 fraction bits) |
| Products | Accumulated at 40 or more bits, then rounded half-up and saturated back to Q8.8 (`round_shift`, `sat_word` in `ftrans_pkg`) |
| FFT twiddles | Q2.14, computed at elaboration time from `$cos`/`$sin` |
| Internal FFT words | 24 bits |
| Softmax probabilities | Q1.15 internally; Q8.8 when multiplied with V |

## Block-circulant processing element (`bcm_pe`, `fft_kernel`)

A weight matrix of F x G blocks is stored as FFT(p_ij): 8 complex values per
block, packed `{imag, real}` in 32 bits at address (i*G+j)*8+k. The FFT of
the index vector is computed once, offline. For output block i, the PE does
the following:

1. It streams in the G input blocks x_j, one per clock.
2. A pipelined radix-2 FFT (3 registered stages for b=8) transforms each x_j.
3. The spectrum is multiplied element-wise with the stored FFT(p_ij).
4. The products are accumulated **in the frequency domain** over j.
5. At the last j, one inverse FFT turns the accumulated spectrum back into
   the output block y_i.

Because the IFFT is linear, one IFFT per output block replaces G of them.

Timing:
- Throughput is one input block per clock.
- The result is out 2*log2(b)+1 clocks after the last input block.
- A tag travels with each block so callers can see which block came back.

Rounding:
- The forward FFT keeps full precision.
- The frequency-domain product is shifted back by 8 bits.
- The inverse FFT divides by b with rounding.
- Over a 4-block row with index values of magnitude 0.25, the result stays
  within about 6 LSB of exact circular convolution.

`ffn_bcm` chains two such PEs: d -> d_ff with ReLU, then d_ff -> d. An
intermediate token buffer sits between them. Each layer walks
token x output block x input block.

## Attention (`attention_head`, `mm_pe`, `softmax_unit`, `exp_pwl`, `mha`)

Attention uses dense weights. Its products (Q K^T and P V) involve no fixed
weights, so a circulant structure would not help.

`mm_pe` is an 8-lane multiply-accumulate with a 1-clock result. The same
module serves as the two kinds of dense PE:
- **Projections**: x W_Q, x W_K, x W_V, and the output projection.
- **Score and weighting products**: Q K^T and P V.

`attention_head` runs five of these PEs in this order:
1. The three projections, in parallel.
2. The scores, scaled by 1/sqrt(d_k) with a Q1.15 constant.
3. A softmax per query row.
4. P V.

With `mask_en`, a score whose key position lies after the query position is
replaced by a "keep = 0" flag. The softmax gives it exactly zero weight.
`ev_mask` pulses once per masked score.

`softmax_unit` works in three phases on one row of up to `L_MAX` scores:
1. **Collect**: stores the scores and tracks the maximum.
2. **Exponentiate**: computes exp(score - max) with `exp_pwl` and sums the
   results.
3. **Divide**: one quotient per clock.

`exp_pwl` is a 16-segment piecewise-linear exp(-x) over [0, 8). Its error is
at most about 2.5 % of full scale. Inputs of 8 or more give 0.

The first probability leaves the softmax n+2 clocks after the last of its n
scores.

`mha` runs H heads in parallel on the same inputs and writes their outputs
into a concatenation buffer. One more `mm_pe` then applies the d x d output
projection.

## Add and normalise (`add_norm`)

For each token, `add_norm` adds the sub-layer output and the residual
(saturating). It then computes the mean and the variance in integer
arithmetic, and the integer square root of the variance with a 16-step
bit-serial method. It outputs gamma*(v-mean)/std + beta, one word per clock.

gamma and beta are loaded per column. Their reset values are gamma = 1.0 and
beta = 0.

## Layers, buffers and sequencing

`seq_buf` is the token buffer between stages:
- It holds `L` tokens x ceil(D/8) blocks.
- It has one write port with per-lane masks.
- It has two combinational block-read ports.

The layers:
- `encoder_layer` = MHA -> add&norm -> BCM FFN -> add&norm.
- `decoder_layer` = masked MHA -> add&norm -> cross MHA -> add&norm -> BCM FFN
  -> add&norm. The cross MHA takes queries from the decoder and keys/values
  from the encoder output.
- Each layer has its own weights and its own intermediate buffers.

`embedding_lookup` handles one sentence at a time:
1. It reads the token ids from the token buffer.
2. It requests one 128-bit beat per embedding block at
   `base + id*ceil(D/8) + block` on a valid/ready read channel. The DDR
   controller is outside this design.
3. It writes the in-order responses into the first layer buffer.

`transformer_ctrl` runs the phases in this order:
1. Source embedding.
2. Encoders 0..N_ENC-1.
3. Target embedding.
4. Decoders 0..N_DEC-1.

With `enc_only` it stops after the encoders, for encoder-only models.

## Top level (`ftrans_top`)

| Port group | What it carries |
|---|---|
| `start`, `enc_only`, `n_src`, `n_tgt`, `busy`, `done` | Command interface |
| `tok_we`, `tok_tgt`, `tok_idx`, `tok_id` | Token-id load |
| `wl` (`wload_t`) | Weight-load bus, see below |
| `ddr_*` | External memory read channel |
| `out_tok`/`out_blk` -> `out_data` | Result read port: last decoder output, or last encoder output when `enc_only` |
| `ev_mask`, `ev_cross`, `ev_fft` | Event pulses, for observing the datapath |

The weight-load bus `wload_t` carries these fields:
- `layer`: encoders first, then decoders.
- `unit`: `U_MHA1`, `U_MHA2`, `U_FFN1`, `U_FFN2`, `U_NORM1..3`.
- `head`.
- `mat`: Q, K, V or output projection.
- `addr` and `data`.

Dense weights are 16-bit, at address row*cols+col. BCM weights are
`{imag, real}` spectra.

A run:
1. Load the weights and the token ids.
2. Pulse `start` with the lengths held.
3. Wait for `done`.
4. Read the result.

## Differences from the published design

- **No coarse-grained pipelining.** Layers run strictly one after another,
  and one sentence at a time. The published design overlaps stages and
  batches several sentences; batch size is therefore fixed at 1 here.
- **No resource scheduler.** The published flow chooses the number of PEs
  per layer type offline. Here every layer instance owns its own PEs:
  - 5 dense PEs per head
  - 1 dense PE for the output projection
  - 2 BCM PEs per FFN

  The structure is the same; only the counts are fixed.
- **Only the feed-forward weights are block-circulant.** The attention
  projections use dense weights here. The paper applies block-circulant
  compression to those weights too.
- **Sizes the paper does not state:**
  - Maximum sentence length `L_MAX = 64`.
  - Inner FFN width `DFF = 4*D = 800`.
  - No positional-encoding adder; positions must be folded into the
    embedding table.
- **Head width.** The head width d_k is d_model/h = 50.
- **Large models.** A 12-layer, width-768 model such as RoBERTa-base does not
  fit the default on-chip weight memories. Running one would need
  layer-by-layer weight reloading, which is not built.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_fft_kernel`, `tb_bcm_pe` | Against a direct DFT and direct circular convolution |
| `tb_mm_pe`, `tb_add_norm` | Bit-exact against integer models |
| `tb_softmax_unit`, `tb_attention_head`, `tb_mha` | Against the exact exponential, within tolerances set by the piecewise-linear exp |
| `tb_encoder_layer`, `tb_decoder_layer` | Bit-exact properties: permutation equivariance of the encoder, causality of the decoder, key-order independence of cross attention. Also row normalisation and event counts. |
| `tb_ftrans_top` | A reduced-size model end to end |

To run a testbench with Verilator:

    verilator --binary --timing -y rtl +libext+.sv rtl/ftrans_pkg.sv tb/tb_mha.sv --top tb_mha
    ./obj_dir/Vtb_mha

At the default sizes the design holds about 1.1 million weight words. No
testbench runs the full-size top: loading its weights alone takes over a
million clocks, which is beyond a practical simulation.
