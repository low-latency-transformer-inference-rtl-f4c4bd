// transformer_block: one transformer block,
//   x1 = LN1(x + MHA(x)),   y = LN2(x1 + FFN(x1)).
//
// Each residual connection forks the row stream: one copy goes through the
// layer, the other waits in a skip FIFO until the layer's output row for the
// same time step arrives at the adding layer. Because the attention layer
// needs a whole sequence before its first output, the first skip FIFO holds
// SEQ + 8 rows; the feed-forward layer is short and its skip FIFO holds 8.
// A fork takes a row only when both branches can accept it.
//
// With LAYER_NORM = 0 the two normalisation layers are left out (the engine
// anomaly model is built that way); the sums then leave the adding layers
// directly.
//
// Configuration words from BASE: MHA, LN1, FFN, LN2, in that order
// (block_words gives the total).
//
// The order of the layers and the residual connections follow the paper's
// block diagram; the skip FIFOs and their depths are this design's choices.
module transformer_block
  import tf_pkg::*;
#(
  parameter int SEQ        = 100,
  parameter int D          = 32,
  parameter int HEADS      = 2,
  parameter int DK         = 4,
  parameter int FF         = 16,
  parameter int REUSE      = 1,
  parameter bit LAYER_NORM = 1'b1,
  parameter int BASE       = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cfg_we,
  input  cfg_addr_t      cfg_addr,
  input  data_t          cfg_data,
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t [D-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [D-1:0]  out_data,
  output logic           loading
);
  localparam int B_MHA = BASE;
  localparam int B_LN1 = B_MHA + mha_words(D, HEADS, DK);
  localparam int B_FFN = B_LN1 + ln_words(D);
  localparam int B_LN2 = B_FFN + ffn_words(D, FF);

  // ---------------- attention sub-layer ----------------
  logic mha_in_ready, sk1_in_ready;
  logic mha_valid, mha_ready, sk1_valid, sk1_ready;
  data_t [D-1:0] mha_data, sk1_data;

  assign in_ready = mha_in_ready && sk1_in_ready;

  multihead_attention #(.SEQ(SEQ), .D(D), .HEADS(HEADS), .DK(DK), .REUSE(REUSE),
                        .BASE(B_MHA)) u_mha (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid (in_valid && sk1_in_ready), .in_ready (mha_in_ready), .in_data (in_data),
    .out_valid(mha_valid), .out_ready(mha_ready), .out_data(mha_data),
    .loading
  );

  row_fifo #(.LANES(D), .DEPTH(SEQ + 8)) u_skip1 (
    .clk, .rst_n,
    .in_valid (in_valid && mha_in_ready), .in_ready (sk1_in_ready), .in_data (in_data),
    .out_valid(sk1_valid), .out_ready(sk1_ready), .out_data(sk1_data),
    .count    ()
  );

  logic add1_valid, add1_ready;
  data_t [D-1:0] add1_data;

  residual_add #(.D(D)) u_add1 (
    .clk, .rst_n,
    .a_valid(mha_valid), .a_ready(mha_ready), .a_data(mha_data),
    .b_valid(sk1_valid), .b_ready(sk1_ready), .b_data(sk1_data),
    .out_valid(add1_valid), .out_ready(add1_ready), .out_data(add1_data)
  );

  logic x1_valid, x1_ready;
  data_t [D-1:0] x1_data;

  if (LAYER_NORM) begin : g_ln1
    layernorm #(.D(D), .BASE(B_LN1)) u_ln1 (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
      .in_valid(add1_valid), .in_ready(add1_ready), .in_data(add1_data),
      .out_valid(x1_valid), .out_ready(x1_ready), .out_data(x1_data)
    );
  end else begin : g_no_ln1
    assign x1_valid   = add1_valid;
    assign add1_ready = x1_ready;
    assign x1_data    = add1_data;
  end

  // ---------------- feed-forward sub-layer ----------------
  logic ffn_in_ready, sk2_in_ready;
  logic ffn_valid, ffn_ready, sk2_valid, sk2_ready;
  data_t [D-1:0] ffn_data, sk2_data;

  assign x1_ready = ffn_in_ready && sk2_in_ready;

  feed_forward #(.D(D), .FF(FF), .REUSE(REUSE), .BASE(B_FFN)) u_ffn (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid (x1_valid && sk2_in_ready), .in_ready (ffn_in_ready), .in_data (x1_data),
    .out_valid(ffn_valid), .out_ready(ffn_ready), .out_data(ffn_data)
  );

  row_fifo #(.LANES(D), .DEPTH(8)) u_skip2 (
    .clk, .rst_n,
    .in_valid (x1_valid && ffn_in_ready), .in_ready (sk2_in_ready), .in_data (x1_data),
    .out_valid(sk2_valid), .out_ready(sk2_ready), .out_data(sk2_data),
    .count    ()
  );

  logic add2_valid, add2_ready;
  data_t [D-1:0] add2_data;

  residual_add #(.D(D)) u_add2 (
    .clk, .rst_n,
    .a_valid(ffn_valid), .a_ready(ffn_ready), .a_data(ffn_data),
    .b_valid(sk2_valid), .b_ready(sk2_ready), .b_data(sk2_data),
    .out_valid(add2_valid), .out_ready(add2_ready), .out_data(add2_data)
  );

  if (LAYER_NORM) begin : g_ln2
    layernorm #(.D(D), .BASE(B_LN2)) u_ln2 (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
      .in_valid(add2_valid), .in_ready(add2_ready), .in_data(add2_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_no_ln2
    assign out_valid  = add2_valid;
    assign add2_ready = out_ready;
    assign out_data   = add2_data;
  end
endmodule
