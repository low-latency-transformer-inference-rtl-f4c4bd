// multihead_attention: the multi-head self-attention layer as four pipeline
// stages, for sequences of SEQ rows of width D.
//
//   stage 1  linear projections: per head three dense layers (D -> DK) make
//            the head's Q, K and V rows from each input row. Q rows go into a
//            Q FIFO (one narrow FIFO per element, SEQ rows deep); K and V rows
//            go straight into the head's K/V register matrices.
//   stage 2  per head: Q K^T, scaling by 1/sqrt(DK) and softmax
//   stage 3  per head: weighted sum of the V rows        (attention_head)
//   stage 4  the head outputs wait in per-head output FIFOs; a row is taken
//            from every head at once, concatenated (HEADS*DK values) and fed
//            through the output dense layer (HEADS*DK -> D).
//
// All projections share one input handshake; since they have identical
// parameters they are always ready together. A whole sequence must have
// entered before its first output row can leave (K is complete only then),
// so the layer's latency is at least SEQ cycles.
//
// Configuration words, from BASE: for each head h the Q, K and V dense layers
// (dense_words(D, DK) each, in that order), then the output dense layer.
//
// Timing (REUSE = 1): an input row per cycle while loading; first output row
// SEQ + 8 cycles after the first input row (1 projection, SEQ-1 further
// loads, 1 Q FIFO, 6 head, 1 output FIFO, 1 output dense); then one row per
// cycle. A new sequence is accepted once every head has finished the previous
// one.
//
// The four stages, FIFOs between them and register storage for K and V follow
// the paper; head count, head width and FIFO depths are parameters chosen by
// this design (the paper does not list them for its models).
module multihead_attention
  import tf_pkg::*;
#(
  parameter int SEQ   = 100,
  parameter int D     = 32,
  parameter int HEADS = 2,
  parameter int DK    = 4,
  parameter int REUSE = 1,
  parameter int BASE  = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  cfg_addr_t        cfg_addr,
  input  data_t            cfg_data,
  input  logic             in_valid,
  output logic             in_ready,
  input  data_t [D-1:0]    in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output data_t [D-1:0]    out_data,
  // status: head 0 is collecting K/V rows
  output logic             loading
);
  localparam int DWORDS = dense_words(D, DK);
  localparam int HD     = HEADS * DK;

  // ---------------- stage 1 ----------------
  logic [HEADS-1:0][2:0] p_in_ready, p_out_valid;
  data_t [HEADS-1:0][2:0][DK-1:0] p_out;
  logic s1_valid, s1_ready;
  logic [HEADS-1:0] qf_in_ready, kv_ready, head_loading;

  for (genvar h = 0; h < HEADS; h++) begin : g_proj
    for (genvar m = 0; m < 3; m++) begin : g_qkv
      dense #(.N_IN(D), .N_OUT(DK), .REUSE(REUSE), .RELU(1'b0),
              .BASE(BASE + (3 * h + m) * DWORDS)) u_proj (
        .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
        .in_valid (in_valid && in_ready), .in_ready (p_in_ready[h][m]), .in_data (in_data),
        .out_valid(p_out_valid[h][m]), .out_ready(s1_ready), .out_data(p_out[h][m])
      );
    end
  end

  assign in_ready = p_in_ready[0][0];
  assign s1_valid = p_out_valid[0][0];
  assign s1_ready = &(qf_in_ready & kv_ready);

  // ---------------- stages 2 and 3: heads ----------------
  logic  [HEADS-1:0]          q_valid, q_ready;
  data_t [HEADS-1:0][DK-1:0]  q_data;
  logic  [HEADS-1:0]          h_valid, h_ready;
  data_t [HEADS-1:0][DK-1:0]  h_data;
  logic  [HEADS-1:0]          o_valid, o_ready;
  data_t [HEADS-1:0][DK-1:0]  o_data;

  for (genvar h = 0; h < HEADS; h++) begin : g_head
    row_fifo #(.LANES(DK), .DEPTH(SEQ)) u_q_fifo (
      .clk, .rst_n,
      .in_valid (s1_valid && s1_ready), .in_ready (qf_in_ready[h]), .in_data (p_out[h][0]),
      .out_valid(q_valid[h]), .out_ready(q_ready[h]), .out_data(q_data[h]),
      .count    ()
    );

    attention_head #(.SEQ(SEQ), .DK(DK)) u_head (
      .clk, .rst_n,
      .kv_valid (s1_valid && s1_ready), .kv_ready (kv_ready[h]),
      .k_in     (p_out[h][1]), .v_in (p_out[h][2]),
      .q_valid  (q_valid[h]), .q_ready (q_ready[h]), .q_in (q_data[h]),
      .out_valid(h_valid[h]), .out_ready(h_ready[h]), .out_data(h_data[h]),
      .loading  (head_loading[h])
    );

    row_fifo #(.LANES(DK), .DEPTH(2)) u_out_fifo (
      .clk, .rst_n,
      .in_valid (h_valid[h]), .in_ready (h_ready[h]), .in_data (h_data[h]),
      .out_valid(o_valid[h]), .out_ready(o_ready[h]), .out_data(o_data[h]),
      .count    ()
    );
  end

  assign loading = head_loading[0];

  // ---------------- stage 4: concat and output projection ----------------
  logic          cat_valid, cat_ready;
  data_t [HD-1:0] cat_data;

  assign cat_valid = &o_valid;
  always_comb begin
    for (int h = 0; h < HEADS; h++)
      for (int d = 0; d < DK; d++) cat_data[h * DK + d] = o_data[h][d];
  end
  for (genvar h = 0; h < HEADS; h++) begin : g_pop
    assign o_ready[h] = cat_valid && cat_ready;
  end

  dense #(.N_IN(HD), .N_OUT(D), .REUSE(REUSE), .RELU(1'b0),
          .BASE(BASE + 3 * HEADS * DWORDS)) u_out_proj (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid (cat_valid), .in_ready (cat_ready), .in_data (cat_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );

  // all projections move in lock step
  assert property (@(posedge clk) disable iff (!rst_n)
                   (&p_in_ready || ~|p_in_ready) && (&p_out_valid || ~|p_out_valid));
endmodule
