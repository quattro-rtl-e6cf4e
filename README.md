# A decoder-only Transformer accelerator for gain prediction in iLQR

The iterative Linear Quadratic Regulator (iLQR) computes a feedback gain
`K_i` and a feed-forward gain `k_i` for every step `i` of a horizon of `T`
steps. It does so in a backward pass that runs from the last step to the
first. That recursion is sequential, and it is the slow part of each iLQR
iteration. The Quattro scheme runs only a short part of the backward pass
(the last steps, `i..T-1`). A small decoder-only Transformer then predicts the
gains of the remaining steps `0..i-1`. It reads the state trajectory and the
gains that were computed, and it predicts all the missing steps at once.

This repository holds synthesizable SystemVerilog for the inference engine
of that Transformer. The engine is a stack of decoder layers and a final
Linear layer. A host processor does the rest of the iLQR loop in software:
rollout, partial backward pass, embeddings, positional encoding, forward
pass, convergence test and the optional LQR blender. The host hands the
engine a sequence of `T` embedded rows of 128 values each. The engine returns
`T` rows of flattened gains.

Two model configurations are published, and one build of this RTL runs both:

| | cart-pole | quadrotor |
|---|---|---|
| horizon `T` (rows) | 30 | 50 |
| decoder layers | 3 | 3 |
| heads / model width | 4 / 128 | 4 / 128 |
| feed-forward width | 256 | 512 |
| outputs per row | 5 (k: 1, K: 1x4) | 52 (k: 4, K: 4x12) |
| cycles in this RTL (simulated) | 93,174 | 234,084 |
| at the published clock | 1.16 ms @ 80 MHz | 1.17 ms @ 200 MHz |
| published FPGA latency | 1.05 ms | 1.73 ms |

The published accelerator was generated from Python by a high-level
synthesis flow, and its internal structure was not published. The
micro-architecture below is therefore this design's own. The parts taken from
the published work are: the layer structure, the sizes, the split of work
between CPU and accelerator, and the use of dual-port on-chip RAM for the
parameters. The latency comes out in the same range as the published one,
but it is not a reproduction of it.

## What one run computes

The host writes the input rows `x_0..x_{T-1}` and pulses `start`. The engine
then applies `n_layers` post-norm decoder layers in place:

```
a_t  = MaskedMultiHeadAttention(x)_t          (row t sees rows 0..t only)
x1_t = LayerNorm1(x_t + a_t)
x_t  = LayerNorm2(x1_t + W2 relu(W1 x1_t + b1) + b2)
```

After the last layer it applies the Linear head, `y_t = Wh x_t + bh`, which
gives `d_out` values per row. The host reshapes each `y_t` into `k_t` and
`K_t`. The attention has 4 heads of 32 values each. It uses separate Q, K, V
and O projections with biases and the usual `1/sqrt(32)` score scale.

## How a layer is scheduled

This is the part of the design that takes the most thought. Everything works
on whole rows of 128 values. Every RAM word is one such row.

**Projection phase.** `mha_unit` reads row `x_t` and runs one pass of its
matrix-vector engine over 384 outputs: Q, K and V stacked. The engine has 128
multipliers and one adder tree, so each output takes one clock. Each result
element is written straight into its lane of row `t` of the Q, K or V buffer,
using per-lane write enables. The phase takes about `T x 387` cycles.

**Attention phase, one row at a time.** For row `t`:

1. Read `q_t`.
2. Stream K rows `0..t` out of the K buffer, one per cycle. For each row, the
   four 32-wide head dot products are formed in the same cycle. Rows after
   `t` are never read. That is the whole causal mask: masked scores are
   left out rather than set to minus infinity.
3. Four `softmax_unit`s (one per head) run side by side over the `t+1`
   scores. This takes `3(t+1)+30` cycles.
4. Stream V rows `0..t` again. Every lane accumulates `p_head,j * v_j`.
5. Apply the output projection: 128 outputs, one cycle each.
6. Put the attention row `a_t` into a one-row hand-over slot.

**Row pipeline.** While `mha_unit` works on row `t+1`, the controller in
`quattro_accel` takes `a_t` from the slot and runs the rest of the layer on
row `t`:

- read `x_t`;
- residual add and layer norm (56 cycles);
- feed-forward (`2*d_ff + 7` cycles);
- residual add and layer norm (56 cycles);
- write the result back over `x_t`.

This in-place write-back is safe. All K and V rows of the layer were
computed in the projection phase, before the first row was written back.

The row pipeline is the slower stage: about 640 cycles per row for the
cart-pole model and about 1,150 for the quadrotor model. So `mha_unit` spends
most of the attention phase stalled: `out_valid` stays high and `out_ready`
stays low until the slot empties. A layer therefore costs roughly
`T x (387 + row pipeline time)` cycles.

After the last layer the Linear head reads each row and writes `d_out`
values into the output buffer. The host reads them back one element at a
time.

## Arithmetic

All values (activations, weights, biases, norm parameters) are 16-bit signed
fixed point with 10 fraction bits. That covers about -32 to +32 in steps of
1/1024. Products are summed exactly in 48-bit accumulators. Each result is
then shifted back with round-half-up and saturated to 16 bits. The published
work does not give its number format. Treat this one as a starting point:
weights trained in floating point need scaling into this range.

- **Linear layer**: `y = sat(round((sum x*w + b*2^10) / 2^10))`, with an
  optional ReLU.
- **Attention score**: the head dot product is requantised. It is then
  multiplied by `floor(2^16/sqrt(32)) = 11585` and shifted by 16.
- **exp**: the softmax subtracts the row maximum, so `exp` only sees `d <= 0`.
  `exp(d) = 2^(d log2 e)`. The integer part of the exponent becomes a right
  shift. The fraction `f` goes through `1 + 0.65625 f + 0.34375 f^2`, which
  is exact at both ends of `[0,1)`. The result is Q.10, 0..1024.
- **Softmax**: a serial divider forms `r = floor(2^26 / sum e)` once. Then
  `p_j = round(e_j r / 2^16)`, so probabilities are Q.10.
- **Layer norm**: the mean uses a rounding shift, so the width must be a
  power of two. The variance is the population variance plus `eps = 1e-5`
  (10 in Q.20). `sigma` is an integer square root, giving Q.10. Then
  `1/sigma = floor(2^30/sigma)` in Q.20, and
  `y = sat(round(sat(round((x-mean)/sigma)) * gamma / 2^10) + beta)`.

## Host interface and memory map

Writes are one element per cycle: `host_we`, `host_bank`, `host_addr` (the
word), `host_lane` (0..127) and `host_wdata`. They are ignored while `busy`
is high. The bank codes are in `quattro_pkg::bank_e`:

| bank | word layout (layer `l`) |
|---|---|
| `BANK_ATTN_W` | `l*512 + n`: row `n` of Wq (0-127), Wk (128-255), Wv (256-383), Wo (384-511); lane `i` = weight of input `i` |
| `BANK_ATTN_B` | `l*4 + {0,1,2,3}`: bq, bk, bv, bo |
| `BANK_FFN_W` | `l*2*D_FF + n`: row `n` of W1; `l*2*D_FF + D_FF + m*(d_ff/128) + c`: chunk `c` (inputs `128c..128c+127`) of row `m` of W2 |
| `BANK_FFN_B` | `l*(D_FF/128+1) + c`: chunk `c` of b1; `l*(D_FF/128+1) + D_FF/128`: b2 |
| `BANK_NORM` | `l*4 + {0,1,2,3}`: gamma1, beta1, gamma2, beta2 |
| `BANK_HEAD_W` | `o`: row `o` of the head |
| `BANK_HEAD_B` | word 0: head bias |
| `BANK_X` | `t`: input row `t` |

`start` samples the run settings:

- `seq_len`: 1..SEQ_MAX;
- `n_layers`: 1..N_LAYER;
- `d_ff`: a multiple of 128, at most D_FF;
- `d_out`: 1..D_OUT.

`done` pulses at the end. `cycles` then holds the number of cycles `busy`
was high. The output is read with `host_raddr` (row) and `host_rlane`
(element). `host_rdata` follows one cycle later.

## Modules

| file | role | timing |
|---|---|---|
| `quattro_pkg.sv` | number format, bank map, `round_shift`/`sat`/`exp_neg` helpers | - |
| `quattro_accel.sv` | top: parameter RAMs, row buffers, layer/row controller, hand-over slot, Linear head | see above |
| `mha_unit.sv` | masked multi-head attention with its own Q/K/V buffers | about `387` per row to project, then about `5(t+1) + 165` per attention row `t` |
| `ffn_unit.sv` | feed-forward, runtime width | `2*d_ff + 7` |
| `layernorm_unit.sv` | layer norm of one row | 56 |
| `residual_add.sv` | saturating row add | combinational |
| `softmax_unit.sv` | softmax of one head's scores | `3*len + 30` |
| `linear_unit.sv` | 128-lane matrix-vector engine | one output per `k_words` cycles, `(n+1)*k_words + 2` to output `n` |
| `dp_ram.sv` | wide dual-port RAM, per-lane write enables, read-first | 1-cycle reads |
| `seq_divider.sv`, `isqrt_unit.sv` | serial divider and square root | one bit per cycle |

Each file opens with a description of its interface and timing.

## Where this departs from the published design, and how far to trust it

- **Micro-architecture.** It is this design's own: the 128-lane engines, the
  row-serial schedule, the hand-over slot, the host port and the bank map.
  The published design was produced by high-level synthesis, and its
  structure is not known.
- **One engine for both models.** The published work built two accelerator
  images (80 MHz and 200 MHz). Here the horizon, feed-forward width, output
  width and layer count are runtime settings. The defaults are the larger,
  quadrotor sizes.
- **Linear head.** It runs on the accelerator because the published block
  diagram draws it inside the accelerator. The prose lists only attention,
  normalisation, residuals and feed-forward.
- **Choices the published work leaves open:**
  - the activation: ReLU;
  - the norm: post-norm, eps 1e-5;
  - the number format;
  - the exp and reciprocal approximations;
  - that the state and gain embeddings are concatenated along the feature
    axis, so the Transformer sees `T` rows.
- **Timing closure.** The adder trees (128 products) are single-cycle
  combinational logic. A 200 MHz FPGA build would need pipeline registers in
  them. That adds a few cycles per engine pass, not per output.
- **Not included.** Embeddings, positional encoding, concatenation, the iLQR
  passes and the output blender run on the host. No software, no bus wrapper
  (such as AXI) and no trained weights are provided.

Verification: each module has a self-checking testbench in `tb/`. Each one
compares every output bit-exactly against `tb/quattro_ref_pkg.sv`, an
integer restatement of the arithmetic above. The testbenches also check the
cycle counts given in the table. `tb_quattro_accel` runs the whole engine
at a reduced size (8 rows, width 16) in five configurations.
`tb_quattro_accel_full` runs it at the default size with random weights:
first the cart-pole configuration, then the quadrotor configuration. All
outputs match. These tests show that the RTL computes what the reference
describes. They do not show accuracy against a floating-point model with
trained weights.

## Simulating

Everything is plain SystemVerilog-2017. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/quattro_pkg.sv tb/quattro_ref_pkg.sv rtl/*.sv tb/tb_quattro_accel_full.sv \
  --top-module tb_quattro_accel_full -o sim
./obj_dir/sim
```

The full-size run takes a few seconds. It prints the cycles of each
configuration and ends with `TB_RESULT checks=N failures=0`. To test a single
block, replace the testbench file and top module name (for example
`tb_mha_unit`). To change the model size, override the top's parameters:
`SEQ_MAX`, `D_MODEL` (a power of two), `N_HEAD`, `D_FF` (a multiple of
`D_MODEL`), `N_LAYER` and `D_OUT` (at most `D_MODEL`).
