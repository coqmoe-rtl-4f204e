# A quantized MoE vision-transformer layer accelerator in SystemVerilog

A Mixture-of-Experts vision transformer (MoE-ViT) swaps some of the MLP blocks of a
ViT for a set of expert MLPs. A small gating network sends each token (image patch)
to only the top-k experts. That is cheap in arithmetic. It is awkward in hardware for
two reasons:

- The token set of each expert is only known at run time.
- The softmax in attention needs exponentials and a division for every attention-map
  element.

This RTL implements one encoder layer of such an accelerator around two ideas:

1. **Attention with a fused, log-quantized softmax.** The post-softmax attention map is
   quantized to 4-bit codes on a log-√2 scale, so each code `a` means the value
   2^(−a/2).
   - The code comes straight from the distance between a score and its row maximum,
     using one constant multiplication. No exponential is ever formed.
   - The attention × V product becomes shifts and adds.
   - Only one reciprocal per row and `T_S` multipliers per cycle remain.
2. **One linear kernel for dense and sparse layers.** A router hands the first `N_L`
   tokens still to be processed to `N_L` compute units (CUs). Every weight row fetched
   from memory is broadcast to all `N_L` CUs.
   - A dense layer (projection, MLP, gate) loads "all tokens" into the router.
   - An expert layer loads that expert's token mask instead.
   - Nothing else changes, so sparse and dense layers share the same hardware. Weight
     traffic per layer drops by the factor `N_L`.

The arithmetic is integer throughout:

- Weights and activations are symmetric INT8 with per-layer scales.
- Attention maps are 4-bit log-√2 codes (the "8/8/4" configuration).
- Accumulators are 32-bit.

## Contents

| file | block |
|---|---|
| `rtl/coq_pkg.sv` | shared constants, `lin_cmd_t` layer command, `pow2_half_neg`, `sat_rshift8` |
| `rtl/log_sqrt2_quant.sv` | fused numerator quantizer: score distance → 4-bit code and its value |
| `rtl/attn_qk_pe.sv` | attention PE: query register, q·k MAC, running max, score FIFO |
| `rtl/safe_softmax.sv` | pass 2: codes into the exp FIFO, denominator sum |
| `rtl/av_shift_unit.sv` | pass 3: shift-accumulate of V, final normalisation with `T_S` multipliers |
| `rtl/recip_unit.sv` | 33-cycle restoring divider, floor(2^32 / l) |
| `rtl/attention_kernel.sv` | one head: Q/K/V buffers, `N_PE` PEs, three-pass controller |
| `rtl/tok_buffer.sv`, `rtl/sync_fifo.sv` | token-row buffer with lane-group write enables; show-ahead FIFO |
| `rtl/linear_cu.sv` | compute unit: one token's activation row, `T_OUT` MAC lanes |
| `rtl/rr_router.sv` | picks the lowest `N_L` available token indices and deals them to the CUs in order |
| `rtl/requant8.sv`, `rtl/gelu_pwl.sv` | INT8 requantizer; piecewise-linear GELU |
| `rtl/linear_kernel.sv` | unified linear kernel: X and hidden buffers, bias table, router, CUs, weight port |
| `rtl/gating_topk.sv` | top-k of the gate logits, softmax of the kept ones, per-expert token masks |
| `rtl/moe_combine.sv` | Σ_j G_j · E_j per token |
| `rtl/coqmoe_top.sv` | one encoder layer: `HEADS` attention kernels + linear kernel + gating + combiner |

Each file begins with a comment on its function, interface, timing, and which parts
follow the source design and which are choices made here.

## Default sizes

The defaults are a ViT-Tiny / M3ViT-Tiny layer:

| parameter | value |
|---|---|
| tokens | 197 (196 patches + class token) |
| heads | 3, of 64 features each (`D_MODEL` = 192) |
| MLP/expert hidden size | 768 |
| experts | 16 |
| top-k | 4 |

The source design gives only the model names, so these sizes come from the public
model definitions. It names the array sizes (`N_PE`, `N_L`, `T_S`) without values.
The defaults here are choices:

| parameter | value | meaning |
|---|---|---|
| `N_PE` | 8 | queries per group |
| `N_L` | 4 | CUs |
| `T_S` | 8 | normalisation multipliers |
| `T_OUT` | 16 | output features per weight word |

A ViT-Small / M3ViT-Small layer needs `HEADS=6` and `D_FF=1536`. The command fields
allow layer sizes up to 4095.

## The attention kernel

### Dataflow

The kernel handles queries in groups of `N_PE`. Each PE holds one query. Then the K
buffer is read once from start to end, and every key row is broadcast to all PEs at
the same time. The V buffer is read the same way. Off-chip or buffer traffic for K
and V is therefore one pass per group, whatever `N_PE` is.

A group runs in three passes:

1. **Pass 1 (QK and max).** For each broadcast key, every PE computes the full
   `D_HEAD`-wide dot product in one cycle. It pushes the 32-bit score into its score
   FIFO and updates its row maximum.
2. **Pass 2 (quantized numerator and denominator).** Each score is popped and its
   distance `d = max − score` is formed. `log_sqrt2_quant` turns it into a code:

       a = clip(round(qk_scale · d / 2^16), 0, 15),   qk_scale = 2·log2(e)·s_qk   (Q0.16)

   This is exactly `round(−2·log2(exp(s_qk·(score − max))))`, the log-√2 code of the
   softmax numerator. The code goes into the exp FIFO. Its value 2^(−a/2) is added to
   the denominator `l`. The value is held in Q1.16: even codes are `65536 >> a/2`, odd
   codes are `46341 >> (a−1)/2`. The denominator is the sum of the *quantized*
   numerators, so each row of the map still sums to 1 after quantization.
3. **Pass 3 (A·V by shifts).** V rows are broadcast. Each PE pops one code per row and
   adds `V << VFRAC >> ceil(a/2)` into one of two accumulator banks, chosen by the
   parity of the code.

### Final normalisation

While pass 3 runs, a restoring divider (`recip_unit`) computes `recip = floor(2^32/l)`.
The row is then finished in `D_HEAD/T_S` cycles with `T_S` multipliers:

    num = acc_even + √2 · acc_odd          (√2 = 23170 / 2^14)
    m   = (recip · out_mult + 128) >> 8     (out_mult = s_v / s_out, Q8.8)
    out = sat8(round(num · m / 2^24))

### Why two banks and ceil(a/2)

For an odd code a = 2k+1, 2^(−a/2) = 2^(−(k+1)) · √2. One way to write the shift rule
uses floor(a/2) = k. Another way writes 2^(−a/2) as 2^floor(−a/2) · (√2 for odd a).
These two disagree by a factor of two for odd codes. The second is the one consistent
with the quantizer, so the RTL shifts by ceil(a/2) = k+1. It multiplies the odd bank by
√2 once per output element, not once per product.

### Timing

One query group costs about

    3·N_TOK + 2·N_PE + D_HEAD/T_S + 50   cycles

(passes, pipeline fill, divider, output). With 197 tokens and `N_PE` = 8 that is about
25 groups of roughly 660 cycles per head. The heads run in lockstep in separate kernel
instances.

## The linear kernel

### Buffers and commands

The kernel owns two activation buffers:

- X, 197 × 192 INT8, written by the attention kernels or by the host.
- The hidden buffer H, 197 × 768.

It also owns a bias table. A layer is one `lin_cmd_t` command with these fields:

- `mode`: dense, or sparse with an `expert`.
- `d_in` and `d_out`.
- `src_sel`: read X or H.
- `wb_en`: write the outputs back to H.
- `gelu_en`.
- `to_gate` and `to_comb`: send the outputs to the gating unit or the combiner.
- `w_base`.
- Requantization `rq_mult` and `rq_shift`.

### Per group of tokens

1. **Pick.** The router presents the lowest `N_L` token indices still in its set.
   CU c gets the c-th one. A last group may be short.
2. **Prefetch.** Each CU copies its token's activation row out of the buffer.
3. **Tiles.** For each output tile of `T_OUT` features, the CUs load the bias. Then
   `d_in` weight words are requested from `w_base + tile·d_in + k`. Each word is the
   `T_OUT` weights of input k. Each returning word is broadcast to all CUs, which do
   `T_OUT` MACs each.
4. **Drain.** The CUs are drained one per cycle through `requant8`, then optionally
   `gelu_pwl`. Each result beat `(tok, tile, 8×T_OUT)` goes out on `o_*`, into H, and to
   gating or the combiner.

### Weight port and counters

The weight port is a request/response pair. `w_req_valid/ready/addr` may be stalled by
memory. `w_rsp_valid/data` return in order, one word per request, without
back-pressure.

- Every cycle a MAC waits for a weight word counts in `stall_cycles`.
- `groups_done` counts token groups.
- A layer streams `ceil(tokens/N_L) · (d_out/T_OUT) · d_in` weight words.

### Weight layout

Weights are stored tile-major. The `T_OUT` outputs of one input feature make one word,
and one tile's `d_in` words are contiguous. A memory image is therefore
`W[tile][k][j] = W(k, tile·T_OUT + j)`.

### GELU

GELU is approximated as `x · clip(0.5 + 0.4375·x, 0, 1)` in Q4.4, a hard sigmoid of
1.702·x. It stays within 0.25 of the exact function over the whole INT8 range.

## Gating and combining

The gate layer is a dense linear layer with `d_out = N_EXP` and `to_gate` set. All
INT8 logits of one token must arrive in one beat, so the top requires
`N_EXP ≤ T_OUT`. At the defaults both are 16.

`gating_topk` works as follows:

1. It takes the top `TOPK` by repeated argmax. On a tie the lower expert index wins.
2. It forms the softmax of the kept logits. The numerators go through the same log-√2
   quantizer, and the weights are normalised to Q.8 (1.0 = 256).
3. It sets the token's bit in each chosen expert's mask.

During a sparse command, the mask of `cmd.expert` is what the router loads. Expert
layers then run as:

- fc1: sparse, GELU, written to H.
- fc2: sparse, `src_sel = H`, `to_comb`.

An expert with no tokens finishes immediately.

`moe_combine` accumulates `G · E` per token and output tile in 32-bit. It reads back
`sat8((acc + 128) >> 8)`, and tiles that no expert wrote read as zero.

## Using the top

`coqmoe_top` brings out everything a host or memory system provides:

- Q/K/V loads per head: `a_ld_valid/sel/head/addr/data`.
- Attention constants: `qk_scale` and `av_mult`.
- Attention control: `attn_start/busy/done`.
- Host writes to X and to the bias table.
- The layer command port: `lin_cmd_valid`, `lin_cmd`, `lin_busy`, `lin_done`.
- The weight memory port.
- The linear result stream `o_*`.
- Gating controls: `gate_scale`, `gate_clear`.
- The combiner: `comb_clear` and the `comb_rd_*` read port.
- Counters.

An MoE encoder layer is driven like this:

1. Load Q, K, V of every head. Pulse `attn_start` and wait for `attn_done`. The rows
   of all heads land side by side in X (head h in features h·D_HEAD…).
2. Projection: a dense command on X. Collect its outputs from `o_*`.
3. The host adds the residual and applies LayerNorm. Its constants can be folded into
   the next layer's weights. The host writes the result to X.
4. Clear gating and run the gate command (dense, `to_gate`).
5. Clear the combiner. For each expert, run fc1 (sparse, GELU, write-back) and then
   fc2 (sparse, from H, `to_comb`).
6. Read the MoE output through `comb_rd_*`.

A dense MLP layer is the same two commands in dense mode.

## Departures and simplifications

- **Pass overlap.** The three attention passes of a group run one after another.
  Groups are not overlapped with each other. The kernel streams, but it is not a
  fully overlapped pipeline.
- **Output back-pressure.** Attention rows, linear result beats and the weight
  response have none. The consumer must accept one beat per cycle.
- **Done by the host.** LayerNorm, residual additions, patch embedding, the
  classifier head, and scheduling layers and experts. The top takes commands rather
  than sequencing a whole network.
- **Chosen here.** The command, weight-port and bias-table formats; the memory layout;
  the fixed-point formats (Q0.16 scale, Q1.16 code values, Q8.8 output multiplier, Q.8
  gate weights); and the GELU approximation.
- **Data access modes.** Activations always live in on-chip buffers. Weights always
  come through the weight port. Preloading weights on chip means putting an on-chip
  memory behind that port; no separate mode is built.
- **Gate softmax.** It reuses the log-√2 numerator quantizer rather than exact
  exponentials.
- **Shift direction.** ceil(a/2) for odd codes, as explained above.
- **Other sizes.** N_PE, N_L, T_S and T_OUT are free parameters. Their defaults are not
  measured design points.

## Verification

Every block has a self-checking testbench in `tb/`, named `tb_<module>.sv`. It compares
against a reference computed in the testbench, usually in real or 64-bit integer
arithmetic. Every testbench ends by printing
`TB_RESULT checks=<n> failures=<m>`, and each has a cycle watchdog.

Cycle counts are checked where a rate is part of the design:

- The recip latency.
- The attention group time, against the bound above.
- Weight words per linear layer.
- Drain and stall accounting.

`tb_coqmoe_top` runs a reduced layer: 10 tokens, 2 heads of 16, hidden 64, 8 experts,
top-2, `N_PE` = `N_L` = `T_S` = 4. It covers:

- Attention.
- Projection.
- Gate.
- All experts with their combine.
- A dense MLP.

It checks every output against a bit-exact integer reference. It also counts the
mechanisms, and each must occur at least once:

- Weight stalls.
- Dense and sparse layers.
- GELU write-back.
- Empty experts.
- Short query and router groups.
- Gate and combine traffic.

`tb_coqmoe_full` runs the same flow with every parameter at its default: 197 tokens,
3 heads, 16 experts and top-4. That is about two million checks. The simulation itself
takes under two minutes, but the Verilator build of the full-size design takes several
minutes.

Simulate with plain Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_coqmoe_top \
        rtl/coq_pkg.sv rtl/*.sv tb/tb_coqmoe_top.sv -o sim && obj_dir/sim

For a single block, list `rtl/coq_pkg.sv`, the block's module and its sub-modules
before its testbench. Uninitialised state starts random in a two-state simulator. The
RTL resets all control state, but memories are not reset, and testbenches only read
what they wrote.
