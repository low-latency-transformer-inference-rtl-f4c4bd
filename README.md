# A streaming fixed-point transformer for low-latency physics inference

This is synthesizable SystemVerilog for a small transformer classifier. Its job is to
classify short time series, such as strain samples from a gravitational-wave detector,
within a few hundred clock cycles. The whole network is laid out in hardware as one
pipeline. An input sequence enters one time step (one row of values) per clock cycle.
The rows flow through an input projection, a stack of transformer blocks and a
classifier head, and one result row comes out per sequence.

The default configuration is the gravitational-wave model:

| Parameter | Default |
|---|---|
| Time steps per sequence | 100 |
| Inputs per step | 2 |
| Transformer blocks | 2 |
| Model width | 32 |
| Outputs | 1, sigmoid |

With `REUSE = 1`, this configuration produces a result 350 cycles after the first row of a
sequence. It accepts a new sequence every 205 cycles. The same RTL, with different
parameters, also covers the two other model shapes this architecture was built for:

- a car-engine anomaly detector: no layer normalisation, softmax output;
- a jet-flavour (b-tagging) classifier.

The design follows the transformer layer implementations for FPGAs published for the
hls4ml compiler. It takes from them:

- the four-stage multi-head attention pipeline;
- the three-stage lookup-table softmax;
- the five-stage layer normalisation;
- the reuse-factor trade-off.

It is not generated by that tool, and it is not by that paper's authors. Where it departs
from that description, this document says so.

## Rows, handshakes and the number format

Every connection between layers carries one row per transfer, with a `valid`/`ready`
handshake:

- a row moves on a rising clock edge where both are high;
- a producer holds its row until it is taken.

Every layer can take a new row every cycle (with `REUSE = 1`). Back-pressure propagates
backwards through the whole pipeline without losing data. The reset (`rst_n`) is
synchronous and active low. It clears the control state: valid bits, counters and FIFO
pointers. Data registers and weight memories are not reset.

All activations and parameters use one format, `data_t` in `tf_pkg`:

- signed, 16 bits: 6 integer bits (sign included) and 10 fractional bits;
- range [-32, 32), step 1/1024.

The 6 integer bits are the precision chosen for the gravitational-wave model. The 10
fractional bits are a choice inside the range where that model's accuracy no longer
depends on the fractional width.

Inside a layer, products and sums are kept exact at full width. The result is reduced once,
at the layer output, by flooring to 10 fractional bits and saturating. Those are the
functions `sat_data` and `shr_sat` in `tf_pkg`. The HLS flow instead uses a separate,
narrower accumulator type (10 integer bits). That type is not modelled here: sums never
overflow inside a layer.

## Loading a trained model: the configuration bus

Weights, biases, gamma and beta are not constants baked into the netlist. They sit in
register files inside each layer. Before data is streamed, the host writes them one 16-bit
word per cycle:

- `cfg_we` high;
- `cfg_addr` the word's address;
- `cfg_data` the value.

Each layer owns a contiguous address range that starts at its `BASE` parameter. The sizes
come from `dense_words`, `mha_words`, `ln_words`, `ffn_words`, `block_words` and
`head_words` in `tf_pkg`. The top lays the ranges out back to back, in this order:

| Section | Layout |
|---|---|
| Input projection | IN_DIM → D: weights W[o][i] at o·IN_DIM + i, then the D biases |
| Block 0 … NBLK−1 | each block: for every head, Q, K and V projections (D → DK each); output projection (HEADS·DK → D); LN1 gamma[D], beta[D]; feed-forward D → FF and FF → D; LN2 gamma, beta |
| Classifier head | dense D → HID, then dense HID → N_OUT |

At the defaults this is 5201 words. The testbenches show how to write them; see
`tb_transformer_top`.

## Dense layers and the reuse factor (`dense`)

`dense` computes y = W·x + b for one row, with an optional ReLU. The reuse factor `REUSE`
sets how many products each multiplier performs per row:

- **`REUSE = 1`:** all N_IN·N_OUT products are formed in parallel. The output is
  registered, giving latency 1 and one row per cycle.
- **`REUSE = R > 1`:** there are N_OUT·⌈N_IN/R⌉ multipliers. In cycle r, the inputs with
  index i ≡ r (mod R) are multiplied and added into the accumulators. The result is ready R
  cycles after the row was taken, and the next row is taken one cycle later. The interval is
  therefore R + 1.

This is the trade the reuse factor expresses: fewer multipliers, and latency and interval
that grow in proportion to R. The top passes one `REUSE` to every dense layer.

The attention heads' dot products, the softmax and the layer norm are always fully parallel.
Only the dense layers are folded. As an example, take a small model (SEQ = 8, D = 8, two
blocks) at REUSE = 4:

| | REUSE = 1 | REUSE = 4 |
|---|---|---|
| Latency (cycles) | 74 | 202 |
| Interval (cycles) | 21 | 64 |

## Multi-head attention (`multihead_attention`, `attention_head`)

This is the part that determines the design's timing. Attention needs the K and V rows of
the *whole* sequence before the first output row can be formed. The layer is a four-stage
pipeline.

1. **Projections.** Each head has three `dense` layers that turn each input row into that
   head's Q, K and V rows. All 3·HEADS projections share one handshake and move in lock
   step; an assertion checks this. Q rows go into a per-head Q FIFO (`row_fifo`, SEQ rows
   deep). K and V rows are written straight into the head.

2. **Scores and softmax** (`attention_head`). K and V are held in register matrices
   K[SEQ][DK] and V[SEQ][DK], so every element can be read in the same cycle. Writing V row
   by row and later reading it by column is the "reshape" of V. When all SEQ K/V rows are in,
   the head switches from the *load* phase to the *attend* phase, and takes one Q row per
   cycle:
   - all SEQ dot products q·K[j] are formed in parallel;
   - they are scaled by the constant 1/√DK (16 fractional bits) and registered;
   - they go through the softmax (three stages, below);
   - the probability rows wait in a small score FIFO.

3. **Weighted sum.** Each probability row p gives o[d] = Σ_j p[j]·V[j][d], for all DK
   outputs in parallel, registered.

4. **Concatenate and project.** Each head's output rows wait in a two-row output FIFO. When
   every head has a row, the rows are concatenated (HEADS·DK values). The output `dense`
   layer projects them back to width D.

After the last probability row of a sequence has been used, the head returns to the load
phase. The next sequence's K/V rows can then be written.

The load and attend phases of one head do not overlap. This design keeps one K/V bank per
head, so a sequence ties up the head for about 2·SEQ cycles. That sets the interval of
2·SEQ + 5 cycles. A second K/V bank would halve it, at the cost of doubling the K/V
registers.

Timing with `REUSE = 1`: the first output row leaves SEQ + 9 cycles after the first input
row was taken (counted from one accept edge to the next). Then one row per cycle follows.
Inside the head, the first output is valid 5 cycles after the edge that took the first Q
row. The registers on that path are:

- score register;
- three softmax stages;
- score FIFO;
- AV register.

Head count and head width (`HEADS = 2`, `DK = 4`) are this design's choices. The models'
published descriptions do not give them.

## Softmax without the K² form (`softmax`, `exp_lut`, `recip_lut`)

softmax(z)_i = e^{z_i} · (Σ_j e^{z_j})⁻¹ is computed in three registered stages.

1. Look up e^{z_j} for all K inputs at once. The table has 1024 entries over [−8, 8), step
   1/64. Entry n holds e^{−8 + n/64}, unsigned, with 8 fractional bits. Inputs outside the
   range are clipped.
2. Add the K exponents once. Invert the sum through a reciprocal table:
   - shift the sum so its leading one is at bit 9;
   - the top 10 bits give a mantissa m in [512, 1024);
   - the table holds round(2²⁰/m);
   - the shift travels alongside.
3. Multiply every exponent by the inverse and shift back.

This needs K multiplications per row, instead of the K² of the form
1/Σ_j e^{z_j − z_i}. No maximum is subtracted before the exponent. Instead, inputs are
clipped to the table range, which is harmless for the score values met here. The latency
is 3 cycles. The three stages stall together.

All tables, here and below, are computed at elaboration by integer constant functions in
`tf_pkg` (`exp_fixed`, `isqrt`, `*_table_entry`). No table files are needed, and every tool
builds identical contents.

## Layer normalisation (`layernorm`, `rsqrt_lut`)

out[j] = (x[j] − mean)/√var · γ[j] + β[j] over the D values of a row, in five stages:

1. mean = (Σ x)·(1/D), with 1/D held to 16 fractional bits;
2. deviations dm[j] = x[j] − mean;
3. var = (Σ dm²)·(1/D);
4. 1/√var from a table, multiplied into every dm[j];
5. scale by γ and add β.

The 1/√var table (`rsqrt_lut`) normalises var by an even shift 2s, so that the top 10 bits
form m in [256, 1024). It then looks up round(2²⁰/√m) and shifts the product back by s.

There is no ε in the denominator. A row with zero variance produces β. The latency is 5
cycles, with one row per cycle.

The published pipeline figure labels the fourth stage's table "Exp LUT", while the text
says the table gives 1/√var. This design follows the text.

## Transformer block (`transformer_block`, `residual_add`, `feed_forward`)

The block is post-norm:

- x₁ = LN(x + MHA(x));
- y = LN(x₁ + FFN(x₁)).

The feed-forward layer is dense D → FF with ReLU, then dense FF → D (`FF = 16` by default).

Each residual connection forks the row stream. A fork takes a row only when both branches
can accept it. One copy goes through the layer. The other waits in a skip FIFO until the
adding layer (`residual_add`, saturating, latency 1) joins it with the matching row.

Attention holds back its output until a whole sequence has arrived. The skip FIFO around
it therefore must hold a full sequence: it is SEQ + 8 rows deep. The feed-forward skip FIFO
needs only 8 rows. `LAYER_NORM = 0` removes both normalisations, as in the engine model.

Block latency with `REUSE = 1` is SEQ + 23 cycles:

| Part | Cycles |
|---|---|
| MHA | SEQ + 9 |
| add | 1 |
| LN | 5 |
| FFN | 2 |
| add | 1 |
| LN | 5 |

## Classifier head (`output_head`, `sigmoid_lut`)

The head first averages the SEQ rows of a sequence into one row. This is a running sum
multiplied by the constant 1/SEQ. The published model description does not say how the
sequence is reduced to one result, and average pooling is this design's choice.

The pooled row then goes through:

- dense D → HID with ReLU (`HID = 16`, assumed);
- dense HID → N_OUT;
- the output activation:
  - a sigmoid table (1024 entries over [−8, 8), bin-centre values) for the
    gravitational-wave model;
  - or a softmax over the outputs (`OUT_SOFTMAX = 1`) for the two classifiers with several
    classes.

## The top level (`transformer_top`)

| Port | Meaning |
|---|---|
| `clk`, `rst_n` | clock; synchronous active-low reset |
| `cfg_we`, `cfg_addr[23:0]`, `cfg_data[15:0]` | configuration writes, one word per cycle |
| `in_valid`, `in_ready`, `in_data[IN_DIM]` | one input time step per transfer, `data_t` each |
| `out_valid`, `out_ready`, `out_data[N_OUT]` | one result per sequence |

There is no positional encoding. The input projection is a plain dense layer
IN_DIM → D. Sequences are framed by counting: every SEQ input rows form one sequence.
There is no start or end marker.

| Parameter | Default | Origin |
|---|---|---|
| `SEQ` | 100 | gravitational-wave model |
| `IN_DIM` | 2 | gravitational-wave model |
| `D` | 32 | gravitational-wave model |
| `NBLK` | 2 | gravitational-wave model |
| `N_OUT` | 1 | gravitational-wave model |
| `OUT_SOFTMAX` | 0 | sigmoid output |
| `LAYER_NORM` | 1 | the model uses layer norm |
| `REUSE` | 1 | fully parallel |
| `HEADS`, `DK`, `FF`, `HID` | 2, 4, 16, 16 | assumed |

Timing, `REUSE = 1`, measured from accept edge to accept edge:

- latency = 1 + NBLK·(SEQ + 23) + SEQ + 3;
- interval = 2·SEQ + 5.

Without layer norm, each block is 10 cycles shorter. A softmax output adds 2 cycles.

| | This design | HLS design, same model, R = 1 |
|---|---|---|
| Latency (cycles) | 350 | 537 |
| Interval (cycles) | 205 | 212 |

## The three model shapes

The sizes below are the published model specifications.

| Model | Steps | Inputs | Blocks | Width | Outputs | Runs at the defaults? |
|---|---|---|---|---|---|---|
| Gravitational wave | 100 | 2 | 2 | 32 | 1 sigmoid | yes |
| Engine anomaly | 50 | 1 | 3 | 16 | 2 softmax, no LN | no: 3 blocks; use `SEQ=50 IN_DIM=1 D=16 NBLK=3 N_OUT=2 OUT_SOFTMAX=1 LAYER_NORM=0` |
| B-tagging | 15 | 6 | 3 | 64 | 3 softmax | no: width 64, 3 blocks; use `SEQ=15 IN_DIM=6 D=64 NBLK=3 N_OUT=3 OUT_SOFTMAX=1` |

All three shapes have been simulated end to end. The gravitational-wave shape runs at the
defaults (`tb_transformer_top_full`). The engine and b-tagging shapes run as parameter
overrides (`tb_workloads`). Their cycle counts with `REUSE = 1`:

| Model | Latency, this design | Latency, HLS design | Interval, this design | Interval, HLS design |
|---|---|---|---|---|
| Gravitational wave | 350 | 537 | 205 | 212 |
| Engine anomaly | 245 | 257 | 105 | 119 |
| B-tagging | 135 | 269 | 35 | 49 |

The published gravitational-wave model has 3394 parameters. This one has 5201, because the
head, feed-forward and classifier widths had to be guessed.

## Verification

Every block has a self-checking testbench, `tb/tb_<module>.sv`. Each testbench:

- compares the outputs with a floating-point model (`tb/tb_ref_pkg.sv`) within a stated
  tolerance;
- checks cycle counts where a latency or rate is defined;
- has a watchdog;
- ends with a `TB_RESULT checks=… failures=…` line.

| Testbench | What it covers |
|---|---|
| `tb_row_fifo` | random push/pop traffic against a queue model |
| `tb_dense` | `REUSE = 1` (latency 1) and `REUSE = 3` (latency 3, interval 4), with back-pressure |
| `tb_softmax` | random rows, latency 3, one row per cycle |
| `tb_layernorm` | random rows |
| `tb_residual_add` | saturation and independent stalls on both inputs |
| `tb_feed_forward` | the two dense layers |
| `tb_attention_head` | SEQ = 6; first output 6 accept edges after the first Q row |
| `tb_multihead_attention` | 2 heads; first output SEQ + 9 cycles after the first input |
| `tb_transformer_block` | three sequences with back-pressure; the skip FIFO must fill to ≥ SEQ rows |
| `tb_output_head` | sigmoid and 3-way softmax versions |
| `tb_transformer_top` | whole model, SEQ = 8, D = 8, four sequences |
| `tb_transformer_top_full` | the same test at the default parameters, three sequences (about 40 s of simulation) |
| `tb_workloads` | the engine and b-tagging shapes, and a small model at REUSE = 4, side by side, each in a `workload_run` harness: results, latency, interval and stalls |

The two top-level tests check each result, the exact latency and the exact interval. They
also count five events and fail if any never happens:

- the design stalls the input;
- the source leaves gaps;
- the sink stalls the output;
- the attention heads re-enter the K/V load phase;
- the attention skip FIFO fills to at least SEQ rows.

Simulating with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/tf_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_transformer_top_full.sv \
  --top-module tb_transformer_top_full
./obj_dir/Vtb_transformer_top_full
```

## Departures from the published design, and limits

- **Accumulator.** Sums are exact and saturate only at layer outputs. There is no separate
  10-integer-bit accumulator type.
- **Weights.** Weights are loaded at run time through a configuration bus, rather than
  compiled in as constants.
- **Head phases.** The load and attend phases of an attention head do not overlap. This is
  why the interval is 2·SEQ + 5.
- **Softmax and sigmoid inputs.** They are clipped to [−8, 8). No maximum is subtracted.
- **Reuse factor.** Only the dense layers are folded. The attention dot products, the softmax
  and the layer norm stay fully parallel at every REUSE.
- **Layer norm.** There is no ε. The 1/√var table follows the text, not the figure.
- **Assumed sizes.** Head count, head width, feed-forward width, classifier width, the
  pooling method and the input embedding are assumptions. The published model descriptions
  leave them open.
- **No tool flow.** No FPGA-specific resources (DSP or BRAM mapping) and no HLS pragmas are
  modelled. Resource figures for a particular device are not reproduced.
