# HeatViT-style accelerator: a ViT engine that prunes its own tokens

A vision transformer spends most of its work on tokens (image patches) that
carry little information for the final decision. This design is an 8-bit
vision-transformer accelerator that removes such tokens between transformer
blocks without adding a second datapath for the job. The decision of which tokens
to keep is made by a small classifier built only from linear layers. Those
layers run on the same GEMM engine as the backbone. A small token selector then
uses the classifier's scores to do three things:

- combine the per-head votes into one score per token;
- keep the informative tokens as a dense matrix;
- fold all the pruned tokens into one extra "package" token, so that their
  information is summarised rather than thrown away.

The nonlinear functions (exp inside Softmax, GELU, Sigmoid) are built from
low-order polynomials and shifts. This lets them work on the 8-bit datapath
without lookup tables.

The RTL follows the accelerator described in *HeatViT: Hardware-Efficient
Adaptive Token Pruning for Vision Transformers* (HPCA 2023). That paper
specifies these parts and their formulas:

- the blocks and their connections;
- the tiling of the GEMM engine;
- the token selection flow;
- the polynomial approximations.

Tile sizes, bit-level formats, handshakes, and the way a host drives the engine
are not given there. They are choices made for this implementation and are
marked as such below and in each file's header.

## Host and accelerator

The accelerator is a slave of a host processor. The host does these jobs:

- LayerNorm and the residual additions;
- moving data between off-chip memory and the accelerator;
- building one job descriptor per layer.

The accelerator (`heatvit_top`) contains:

| part | module | role |
|---|---|---|
| input ping-pong buffer | `pingpong_buffer` | token matrix of the current job, two banks |
| weight ping-pong buffer | `pingpong_buffer` | one output tile of weights, two banks |
| GEMM engine | `gemm_engine` (of `gemm_pe`) | Th x To x Ti int8 MACs with 32-bit accumulators |
| control logic | `layer_controller` | loops, addresses, requantisation, activation, softmax pass |
| nonlinear units | `gelu_unit`, `sigmoid_unit`, `softmax_unit` (uses `exp_approx`, `seq_divider`) | applied on the way to the output buffer |
| token selector | `token_selector` (uses `score_combiner`, `gumbel_decision`) | keep/prune, dense packing, package token |
| output buffer | `output_buffer` | results, read back by the host |

The loading and computing sides overlap. While a job runs, the host can fill
the other bank of the input buffer with the next job's tokens. It can also fill
the other weight bank with the next output tile. When the next weight tile is
missing, the engine waits; the weight-bank stall is a normal event.

## The layer job

Every step of inference is a job. The host writes a `layer_desc_t` (see
`heatvit_pkg`) and pulses `start`. A job ends with a one-cycle `done` pulse.

| field | meaning |
|---|---|
| `job` | `JOB_GEMM` (one linear layer), `JOB_SELECT` (token selection) or `JOB_AVG` (mean over all token rows) |
| `n_tok` | rows (tokens) of the input matrix |
| `di_w` | input words per row, Di/16; must be a multiple of the head count (6) |
| `do_t` | output tiles of 16 columns, per head for attention layers, per row otherwise |
| `attn` | attention-related layer: keep results per head (Concat) instead of summing (Sum) |
| `shift` | requantisation: `acc >>> shift`, saturated to int8 |
| `act` | `ACT_NONE`, `ACT_GELU`, `ACT_SIGMOID` or `ACT_SOFTMAX` |
| `sm_len` | softmax group length (valid columns per head or per row) |
| `n_pkg_in` | for selection: package tokens already at the end of the input |
| `thr` | for selection: keep threshold, Q0.8 (128 = 0.5) |

Bias is not part of the datapath. The host folds it in or adds it afterwards.

## The GEMM engine and the head lanes

This is the part that is easiest to misread. The engine has TH = 6 head lanes.
Each lane holds TO = 16 PEs, and each PE takes a dot product of TI = 16 bytes
per cycle, so the engine does 1536 MACs per cycle.

The input row of Di channels is split into `HEADS` equal slices of K = di_w/6
words. In one pass, lane `th` works through slice `th` of the row. It uses
the matching slice of the same 16 weight rows. What happens next depends on
`attn`:

- **Sum (`attn = 0`).** The six lane accumulators are added. The result is an
  ordinary dense layer: each of the 16 outputs sees all Di inputs. The slicing
  only spreads the work over the lanes.
- **Concat (`attn = 1`).** The six accumulators are written out separately.
  Lane `th` produces the 16 outputs of head `th`, computed from that head's
  slice only. They are stored at output word `th*do_t + ot`, so the row holds
  head 0's `do_t` tiles, then head 1's, and so on.

Concat mode is how the per-head products of attention map onto one engine:

- **Q·Kᵀ.** Input rows are Q, with the heads side by side. Weight rows are K,
  one row per key token. Each head gets up to `do_t*16` scores per query.
- **Scores·V.** Input rows are the concatenated per-head score rows. Weight
  row `o` is column `o` of each head's V, laid out per head.

The token classifier's per-head MLP is run the same way. Weight row `o` is the
concatenation of each head's weight column `o`. Its head-weight (pooling) layer
is a Sum layer.

The classifier also needs a global feature: the mean over all tokens of the
per-head MLP output. An average job (`JOB_AVG`) computes it with the token
selector's accumulator. It treats every row as pruned, so the single output
row is the mean of the input rows, within one LSB. The host then places that
row beside every token's local feature for the next classifier layer.

A row of the output buffer holds up to 1536 bytes. For a Concat layer, the
output needs `6*do_t*16 <= 1536` bytes.

Write-back happens after the last input word of a token. In Sum mode it writes
one word. In Concat mode it writes six words, one per cycle. Each byte is
`sat8(acc >>> shift)`. It then passes through GELU or Sigmoid if the descriptor
asks for one.

## Token selection

A selection job turns a stage input of `n_tok` rows into a shorter dense
matrix in the output buffer. Before starting the job, the host writes one entry
per token into the selector's score memory. Each entry holds, for each head i:

- `s_keep[i]` and `s_prune[i]`: the classifier's 2-way softmax output, Q0.8;
- `a[i]`: that head's weight from the sigmoid branch, Q0.7.

The selector then walks the tokens in order:

1. Row 0 (the class token) is always kept. So are the last `n_pkg_in` rows,
   which are package tokens of earlier stages.
2. For any other token, `score_combiner` forms the weighted head average
   S̃[c] = Σ sᵢ[c]·aᵢ / Σ aᵢ for c in {keep, prune}. It uses one 32-cycle
   division per token.
3. `gumbel_decision` subtracts the larger score and takes exp of both. It keeps
   the token if exp(keep)/(exp(keep)+exp(prune)) > thr. This is evaluated as
   `exp(keep)*256 > thr*Sum`, so no division is needed. At inference no Gumbel
   noise is added, so this is a plain two-way softmax compared with the
   threshold.
4. A kept row is copied, word by word, to the next free output row. The result
   is dense, so later layers simply see fewer tokens.
5. A pruned row is added element-wise into the 16-bit accumulator Tmp.
6. At the end, if T > 0 tokens were pruned, Tmp·floor(2¹⁶/T) >>> 16 (the mean)
   is appended as the new package token.

`n_out` then gives the new token count, and `n_kept` the number of kept
informative tokens.

The selector reads token rows through a seventh read port of the input buffer.
While it runs, it owns the output buffer's write port.

## Polynomial nonlinearities

All three units take int8 values with 4 fractional bits (range −8 … 7.94).

- **exp** (`exp_approx`, inside Softmax and the keep/prune decision). It
  handles x ≤ 0. It splits x = −z·ln2 + p with p in (−ln2, 0]. It evaluates
  0.3585(p+1.353)² + 0.344 and shifts the result right by z. The input is
  Q7.8 and the output Q1.16. z is found by multiplying by 1/ln2 with one
  correction step.
- **Softmax** (`softmax_unit`). It works on a group of up to 256 values in
  three passes:
  - store the values and find the maximum;
  - sum exp(x − max);
  - form one reciprocal δ₂·2²⁴/Σ with a sequential divider, then multiply it
    into every exp.

  Here δ₂ = 0.5, so outputs are Q0.8 and saturate at 127. This scaling keeps
  the output inside the signed 8-bit range used by the next layer.
- **GELU** (`gelu_unit`, combinational). GELU(x) ≈ x/2·(1 + L(x/√2)), with
  L(u) = sign(u)·δ₁·[a(min(|u|, −b) + b)² + 1], a = −0.2888, b = −1.769 and
  δ₁ = 0.5. With δ₁ = 0.5, large positive x gives 0.75x rather than x. This is
  the regularised form the network is trained with, not an error.
- **Sigmoid** (`sigmoid_unit`). It uses the PLAN piecewise-linear form:
  - slope 1/4 up to |x| = 1;
  - slope 1/8 up to 2.375;
  - slope 1/32 up to 5;
  - 1 beyond 5;
  - mirrored for negative x.

  The output is Q0.7. The HeatViT paper names PLAN but does not print its
  segments. The values used here are those of the published PLAN method.

Softmax is applied as a second pass over the output buffer. For each row (and,
in Concat mode, for each head), the controller does these steps:

1. Read the first `sm_len` results.
2. Stream them through `softmax_unit`.
3. Write the normalised values back.
4. Zero the rest of the last word.

## Buffers and data formats

- **Input buffer.** It has 256 rows × 96 words of 16 bytes per bank. Token
  `n`, channels 16c…16c+15, is at word `n*96 + c`.
- **Weight buffer.** One bank holds a tile of 16 output rows × up to 1536
  input channels. The host writes word `c`, segment `o`: the 16 weights of row
  `o` for channels 16c…16c+15. `w_commit` hands the tile over. The engine
  releases a tile once every token has used it.
- **Output buffer.** It has the same shape as the input buffer. Port A belongs
  to the controller or the selector. Port B is the host's read port. Reads take
  one cycle.

Between layers, the host copies the output back into the input buffer. It also
adds residuals and applies LayerNorm.

## Timing

- **GEMM tile, Sum mode.** One output tile of a non-attention layer takes
  `n_tok·(di_w/TH + 3)` cycles, plus 3 cycles to start. The controller test
  times a 10-token, 8-word job at exactly `3 + 10·(8/TH + 3)` cycles with
  a reduced tiling.
- **GEMM tile, Concat mode.** Attention layers add about `2 + TH` cycles per
  token for the serial write-back.
- **Softmax pass.** It costs about 6 cycles per element plus 40 per group.
  This serial pass is the bottleneck of the attention layers. At the default
  size, 197 tokens of DeiT-S take the following cycle counts:

  | layer | cycles |
  |---|---|
  | FC1, 384 to 1536 channels | 132,961 |
  | FC2, 1536 to 384 channels | 91,417 |
  | Q·Kᵀ without Softmax | 31,143 |
  | Q·Kᵀ with Softmax over 197 keys | 1,236,783 |
  | scores·V | 17,805 |

  A wider softmax unit, or several of them, would be the first thing to add.
- **Token selection.** It costs `d_words + 1` cycles per row, plus 35 cycles
  per scored token.

## Where this implementation departs from, or goes beyond, the paper

- **Package token.** The paper's algorithm section forms it as a keep-score
  weighted average. Its hardware flow uses a plain average (Tmp += xᵢ, then
  Average(Tmp)). The plain average is implemented here.
- **Tile sizes.** Ti = To = 16 and Th = 6 are not given in the paper; they are
  chosen for 6-head models. Buffer sizes (256 tokens, 1536 channels) are chosen
  so that DeiT-S fits.
- **Host-written scores.** The selector's scores are written by the host from
  the classifier's GEMM outputs. The paper draws a link from the GEMM engine to
  the classifier but gives no interface for it.
- **Forced keep.** The class token and earlier package tokens are always kept.
  No package token is added when nothing is pruned.
- **Work left off the accelerator.** LayerNorm, residuals, and bias are left
  to the host. So is concatenating the global feature beside each token's
  local feature; the mean itself is computed on the accelerator.
- **Fixed point.** All binary-point positions, the requantisation shift,
  saturation, and the Q formats of the nonlinear units are this design's
  choices.
- **Not modelled.** The host processor, the memory controller, and off-chip
  DRAM are outside the RTL. The top exposes buffer write and read ports in
  their place.
- **Model sizes.** Models with more than 6 heads, or with rows wider than 1536
  bytes, do not fit the default build:
  - DeiT-B has 12 heads and a 3072-wide MLP;
  - LV-ViT-M has 8 heads.

  A 3-head model such as DeiT-T runs with each head padded by a zero slice.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/heatvit_pkg.sv \
  tb/tb_heatvit_top.sv --top-module tb_heatvit_top -Mdir obj -o sim
./obj/sim
```

The `-Irtl` option lets Verilator find the other modules by name.

| testbench | what it checks |
|---|---|
| `tb_gemm_engine` | random dot products, Concat and Sum, clear/enable |
| `tb_pingpong_buffer` | bank hand-over, segment writes, full/empty flags |
| `tb_output_buffer` | both ports, read-during-write, one-cycle latency |
| `tb_exp_approx` | every input against the formula, and error against true exp |
| `tb_gelu_unit`, `tb_sigmoid_unit` | all 256 inputs against the formulas |
| `tb_softmax_unit` | random groups, back-pressure, against a real-valued model |
| `tb_score_combiner` | the weighted average and its latency |
| `tb_gumbel_decision` | the keep decision against exact arithmetic |
| `tb_token_selector` | dense packing, forced keep, package-token mean, average jobs |
| `tb_layer_controller` | loop order, addresses, activations, tile timing, hand-off to the selector |
| `tb_heatvit_top` | small tiling (Ti = To = 4, Th = 2): three pruning stages end to end |
| `tb_heatvit_top_full` | default parameters: two DeiT-S-size stages (197 tokens × 384 channels) |
| `tb_heatvit_workloads` | default parameters: DeiT-S / LV-ViT-S MLP and attention layer shapes, and DeiT-T attention with 3 heads padded onto the 6 lanes |

The two top-level tests share a host model, `tb/heatvit_host.svh`. It loads
buffers, builds descriptors and computes reference results. It also counts how
often each mechanism happens:

- Sum mode and Concat mode;
- each activation (GELU, Sigmoid, Softmax);
- a pruned token and a package token;
- a forced keep;
- an average job;
- a weight-bank stall;
- an input bank loaded during a job.

A mechanism that never happens counts as a failure. The full-size test takes
a few seconds.

To change the size, override the `heatvit_top` parameters (`TI`, `TO`, `TH`,
`HEADS`, `N_MAX`, `D_MAX`). `D_MAX` must be a multiple of `HEADS*TI`.
