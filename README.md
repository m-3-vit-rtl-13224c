# An expert-by-expert accelerator for a mixture-of-experts vision transformer

A mixture-of-experts (MoE) layer replaces the MLP of a transformer block by
N small MLPs ("experts"), and a router sends every token to only K of them.
For multi-task vision this works well, because each task gets its own router
and uses its own subset of shared experts. On an FPGA it is a problem: which
experts the next token needs cannot be predicted, so a straightforward
token-by-token implementation must keep all N experts on chip, or fetch
experts from DRAM on demand and stall.

This design turns the loop around. The router first runs over **all** tokens
of the layer and appends each token to the queues of its K experts. The
experts are then computed **one at a time**, each over its whole queue. While
expert *e* computes from one bank of a two-bank (ping-pong) weight buffer,
the next non-empty expert is copied from DRAM into the other bank; then the
banks swap. Only two experts are ever on chip, whatever N and K are. The
load latency is hidden behind computation. Switching to another task or
frame needs no special step: a task switch only changes which router rows
are loaded.

The RTL implements the whole backbone of such a model around this idea. It
has patch embedding, then 12 transformer layers computed one after another
on the same hardware. Layers alternate between a ViT layer (attention + MLP)
and an MoE layer (attention + routed experts). Everything is
SystemVerilog-2017 and compiles with Verilator 5 and with Yosys through its
slang front end. Every unit has a self-checking testbench. The complete
design is checked bit-exactly against an independent reference at reduced
size.

## 1. What happens in one frame

`m3vit_top` receives a `start` pulse with a `task_id`. It then runs the
following steps in order, each on shared hardware.

1. **Patch embedding.** The patch-projection weights and the position
   embeddings are loaded. Each of the T patches is projected to a D-wide
   token, and its position embedding is added. The T tokens go into the
   token buffer X.
2. **For each layer l = 0 … 11:**
   - The layer's two sets of norm parameters and all attention weights are
     loaded into the on-chip buffers of the units.
   - `X ← X + SelfAttention(LN1(X))`
   - Even `l` (ViT layer): the MLP weights are loaded, then
     `X ← X + W2·gelu(W1·LN2(X))`.
   - Odd `l` (MoE layer): the router rows for `task_id` are loaded, then
     `X ← X + Σ_k R(x)_k · expert_k(LN2(X))`. The MoE unit reads its experts
     from DRAM itself while it runs.
   - A two-way "layer type" multiplexer chooses whether the MLP result or
     the MoE result is added back to X.
3. **Output.** X leaves on `out_valid/out_ready` with the token index. This
   is the feature map that per-task decoders would consume.

The top has counters that make each mechanism visible from outside:

| Counter | What it counts |
|---|---|
| `stat_vit_layers` | ViT layers run |
| `stat_moe_layers` | MoE layers run |
| `stat_experts_run` | experts computed |
| `stat_prefetches` | expert loads that overlapped a computation |
| `stat_load_wait` | cycles the expert computation waited for a load |
| `stat_frames` | frames processed |
| `stat_task_switches` | frames whose task differed from the previous frame |

### Off-chip layout

All parameters live in external memory. The memory is read through one port
that returns words of `LANES` 16-bit values: `mem_req/mem_addr` are accepted
on `mem_gnt`, and data returns in order on `mem_valid/mem_data` after any
latency. Word addresses are laid out as follows:

```
0                       patch projection: D rows x PD/LANES words
                        position embedding: T rows x D/LANES words
PE_WORDS + l*LSTRIDE    layer l:
                          LN1 gamma, LN1 beta, LN2 gamma, LN2 beta   (D/LANES words each)
                          head h = 0..NH-1: W_q, W_k, W_v            (DH rows x D/LANES)
                          attention projection                        (D rows x D/LANES)
                          ViT layer: W1 (MLP_H rows x D/LANES), W2 (D rows x MLP_H/LANES)
                          MoE layer: router of task 0..N_TASKS-1      (N rows x D/LANES)
                                     expert 0..N-1: W1 (HE rows), W2 (D rows)
```

Weight rows are stored in their natural order, so word `r*(len/LANES)+c`
holds elements `c*LANES … c*LANES+LANES-1` of row r. `LSTRIDE` is the same
for all layers, so a ViT layer and an MoE layer occupy slots of equal size.

## 2. The MoE unit (`moe_layer`)

This unit matters most, and it is the one whose inner workings the original
description gives in detail. It works in three phases.

**Gating.** Each token that enters is copied into the unit's token buffer,
and its output accumulator is cleared. The token then goes to `gating_unit`,
which works as follows:

- It computes the N router logits `G(x) = W_r·x` with one linear layer
  (LANES products per cycle).
- It feeds the logits to a `softmax_unit`.
- It picks the K largest logits with a combinational arg-max. The arg-max
  is repeated K times, and the experts already taken are masked out each
  time. Ties go to the lower expert number.

For each chosen expert the gating unit emits one `push` per cycle carrying
(expert, token index, softmax probability). `expert_queues` appends that
entry to the expert's queue. The gate weight is the plain softmax value, not
renormalised over the K chosen experts, as in `y = Σ_k R(x)_k f_k(x)`.

**Expert loop.** Once all T tokens are queued, the controller finds the
lowest-numbered non-empty queue and loads that expert into bank 0 of
`pingpong_buffer`. Then it repeats these steps for each non-empty expert e:

1. It starts the `weight_loader` on the **next** non-empty expert, into the
   other bank. This is the prefetch, and `overlapped_loads` counts it.
2. Meanwhile it feeds the tokens of e's queue, one after another, through
   an `mlp_unit` (hidden width HE) that reads bank `cur`.
3. After each token it combines the expert output into the token's
   accumulator: `ybuf[t] += qmul(weight, out)`. This takes one cycle per
   LANES values.
4. When both the queue and the prefetch are done, the banks swap. Any cycle
   spent waiting for a prefetch that is still running is counted in
   `load_wait_cycles`.

Empty queues are skipped, so an expert that no token chose is never loaded.
The first expert of a layer is the only load that is not hidden.

**Output.** The T accumulators leave in token order, and the queues are
cleared for the next layer.

The on-chip storage of this unit is two expert banks, the router rows of one
task, the queues (N·T entries of index and weight) and two T×D token
buffers. The number of experts enters only through the queue count.

Time per MoE layer ≈ T·(N·D/LANES + 3N + 45) for gating, plus
`T·K·(HE·D/LANES + D·HE/LANES + D/LANES)` for the experts. The second term
equals the time of a ViT MLP of width `K·HE` over all tokens. With HE =
MLP_H/4 and K = 4, experts cost the same as the ViT MLP they replace. The
memory traffic is N_active × one expert per layer, instead of one expert per
token and choice.

## 3. The other units

| Module | Function | How | Rate |
|---|---|---|---|
| `matvec_seq` | y_r = W_r·x for n rows | one LANES-wide word of W per cycle, adder tree, exact 48-bit sum | D/LANES cycles per row |
| `patch_embed` | token = W_p·patch + pos | `matvec_seq` over the projection, then one position word per cycle | D·PD/LANES + D/LANES + ≈4 per patch |
| `layer_norm` | (x−μ)/σ·γ+β | sum, mean via ×1/D, variance, sequential integer square root, one divider for 1/σ | ≈ 3·D/LANES + 60 per token |
| `attention_head` | one head | collect phase: Q, K, V of each token (3·DH rows); attend phase per query: T scores, softmax, P·V | 3·DH·D/LANES per token; ≈ T·DH/LANES + 3T + 40 + DH·T/LANES per query |
| `self_attention` | NH heads + projection | heads run in parallel on the broadcast token stream; the concatenated outputs go through one projection `matvec_seq` | per query: head time + D·D/LANES |
| `mlp_unit` | W2·gelu(W1·x) | two `matvec_seq`, a GELU stage between them, fc2 starts after the last hidden value | H·D/LANES + D·H/LANES + ≈6 per token |
| `gating_unit` | top-K router | described in section 2 | N·D/LANES + 3N + ≈45 + K per token |
| `softmax_unit` | softmax | max pass, exp pass (summing), one division 2^32/Σ, scaling pass | 3·len + ≈35 |
| `gelu_unit` | GELU | one-cycle registered stage | 1 per cycle |
| `weight_loader` | DRAM → buffer copy | keeps requests going each granted cycle, writes returning words in order | len + latency when never stalled |
| `expert_queues` | N queues | one array of N×T entries, per-expert counters | 1 push per cycle |
| `pingpong_buffer` | two expert banks | independent write (fill) and read (compute) banks | 1 word per cycle each side |
| `seq_div`, `isqrt_seq`, `buffer_ram` | helpers | restoring divider, bit-serial square root, single-port-write/synchronous-read RAM | |

All token interfaces use valid/ready handshakes. All weight buffers are
written through plain write ports by the top's own `weight_loader`.

## 4. Numbers and approximations

- **Data.** Every value (activations, weights, norm parameters) is a signed
  16-bit Q7.8 number, so the range is ±128 with a step of 1/256.
  - Products are summed exactly in 48 bits.
  - A result is shifted right by 8 and saturated (`acc_to_data`).
  - Additions (residuals, position embedding, the expert combine) saturate.
- **GELU.** `x·clamp(0.5 + 1.702x/6, 0, 1)`: the sigmoid form of GELU with
  the sigmoid replaced by a clamped line.
  - The result is zero below −1.76 and exactly x above +1.76.
  - The largest error against the exact GELU is about 0.07. The testbench
    checks it over all 65,536 inputs.
- **exp.** `exp(d) = 2^(d·log2 e)` for d ≤ 0. The integer part is a shift.
  The fractional power of two is taken as a straight line (error below
  6 %). The output is Q0.16.
- **Softmax.** Uses a single reciprocal of the sum, taken with a 33-cycle
  divider. The probabilities are Q7.8.
- **Attention.** Scores are scaled by `floor(256/√DH)/256`.
- **Layer norm.** Uses `1/σ = 2^16 / isqrt(var+ε)` with ε one LSB² of the
  variance.

These choices are this design's own. The published design does not say
how its FPGA evaluates the non-linear functions, or which word width it
uses.

## 5. Sizes

Parameter defaults are the ViT-small MoE backbone as it was run on the FPGA.

| Parameter | Default | Origin |
|---|---|---|
| `NH` heads | 12 | printed in the hardware diagram |
| `N` experts, `K` chosen | 16, 4 | stated |
| `N_LAYERS` | 12 (6 ViT + 6 MoE) | stated (latency breakdown); MoE in every second block |
| `N_TASKS` router sets | 5 | the largest task count evaluated (5 tasks; the other dataset has 2) |
| expert width `HE` | MLP_H/4 = 384 | stated: experts four times smaller than the ViT MLP |
| `D`, `MLP_H` | 384, 1536 | ViT-small widths (general knowledge) |
| `T` | 196 | 224×224 input with 16×16 patches (DeiT default, assumed) |
| `PD` | 768 | 16×16×3 patch (assumed) |
| `LANES` | 32 | one 64-byte memory word per cycle, about the DDR4 bandwidth of the target board at 300 MHz (assumed) |

## 6. What the default configuration costs

At the defaults, one frame takes about 1.05·10^8 cycles, which is 0.35 s at
300 MHz:

| Part | Cycles |
|---|---|
| Patch embedding | 1.8·10^6 |
| Attention, per layer | 1.3·10^6 |
| ViT MLP, per ViT layer | 7.2·10^6 |
| Experts, per MoE layer | 7.2·10^6 |

The reference FPGA implementation reports 84.5 ms on a 1,728-DSP device.
This RTL performs 32 multiply-accumulates per engine and cycle, so it is
about 4× slower. More lanes reduce the time proportionally, up to the
memory bandwidth for the expert loads. As in the reference implementation,
the experts of an MoE layer take the same time as the MLP of a ViT layer.

The on-chip storage comes to about 6.1 MiB:

| Storage | Size |
|---|---|
| MLP weights | 2.25 MiB |
| Attention weights | 1.125 MiB |
| Expert ping-pong banks | 1.125 MiB |
| Patch-embedding weights | 0.71 MiB |
| Token, Q, K and V buffers | 0.88 MiB |

Keeping all 16 experts instead would need 9 MiB for the experts alone. The
reference reports 4.84 MiB. That is below this RTL mainly because the MLP
buffer and the expert banks are separate here, though they are never used
at the same time. Merging them, or streaming the ViT MLP through the same
ping-pong scheme, is the obvious next step to fit the board's 4.75 MiB of
block and Ultra RAM.

## 7. Where this RTL goes beyond or departs from the published description

- **Unit internals.** The description names the units (layer norm,
  attention heads with Q×K / softmax / ×V, linear projection, FC layer with
  GELU, gating, per-expert queues, load/compute expert, combine) and their
  order. It does not give their internals, so the arithmetic, the buffers
  and the schedules here are this design's own.
- **Weight loading.** Attention and MLP weights are loaded before each layer
  without overlap, which costs ≈ 6·10^4 cycles per layer. Only the expert
  loads are double-buffered, as described.
- **Model details.** No biases are used. There is no class or distillation
  token. The block is pre-norm with residuals.
  - Attention is scaled by 1/√(head width). The published formula writes
    √C with C "the hidden dimension".
  - Top-K is taken on the logits, which gives the same order as taking it
    on the probabilities.
- **Router variant.** Only the multi-gate router (one router per task) is
  built. That is the variant the results are based on. The task-conditioned
  router is not built.
- **Not built.**
  - The per-task dense-prediction decoders: no hardware is described for
    them. Their input is the `out_*` stream.
  - The DRAM: it is modelled behaviourally in `tb/dram_model.sv`.
  - The FPGA platform: clocking, host interface and memory macros. Buffers
    are plain arrays.

## 8. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops, and
each has a watchdog. Test data is generated from hash functions of the
address (`tb/tb_util_pkg.sv`), so the memory model and the references agree
without data files. Example:

```
verilator --binary --timing --assert -Wno-fatal rtl/m3vit_pkg.sv tb/tb_util_pkg.sv \
  tb/tb_ref_pkg.sv rtl/*.sv tb/dram_model.sv tb/tb_m3vit_top.sv --top-module tb_m3vit_top
./obj_dir/Vtb_m3vit_top
```

| Testbench | What it checks |
|---|---|
| `tb_m3vit_top` | Two frames, task 0 then task 1, at T=6, D=96, 12 heads, MLP 384, 16 experts, top-4, 4 layers, 8 lanes. The memory model has latency 6 and random stalls. Every output value is compared with an independent behavioural model of the whole network. It also checks that ViT and MoE layers, expert prefetches, memory stalls, both frames and the task switch all occurred. |
| `tb_moe_layer` | 8 tokens, 16 experts. Checks exact outputs, and that every used expert runs once and every later load is a prefetch. |
| `tb_gating_unit` | Expert order, gate weights, a router change, cycle bound. |
| `tb_expert_queues` | Queue order, contents and clear. |
| `tb_pingpong_buffer` | Simultaneous fill and read, bank swaps. |
| `tb_weight_loader` | Exact copies with and without grant stalls; len + latency cycles when never stalled. |
| `tb_self_attention` | 12 heads plus projection against a reference; projection cycle count. |
| `tb_attention_head` | One head against a reference. |
| `tb_mlp_unit` | Exact outputs against a reference. |
| `tb_layer_norm` | Full-width tokens, both parameter sets. |
| `tb_softmax_unit` | Length-196 vectors. |
| `tb_gelu_unit` | All 65,536 inputs. |
| `tb_patch_embed` | Exact tokens, index wrap, cycle bound. |

A frame at the default (full) size is about 10^8 clock cycles of a design
with roughly 12 MB of state. A Verilator simulation did not reach the first
million cycles within several minutes, so there is no full-size testbench.
The largest configuration simulated to completion is the one of
`tb_m3vit_top` above: two frames at T=6, D=96, 12 heads, MLP width 384, 16
experts (top-4), 2 tasks and 4 layers, with 8 lanes, about 3.2·10^5 cycles
per frame.
