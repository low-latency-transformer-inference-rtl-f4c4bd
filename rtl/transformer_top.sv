// transformer_top: a complete streaming transformer classifier.
//
//   input rows (IN_DIM values per time step)
//     -> input projection, dense IN_DIM -> D
//     -> NBLK transformer blocks (multi-head attention, add, layer norm,
//        feed-forward, add, layer norm)
//     -> output head (average over the sequence, two dense layers, sigmoid
//        or softmax)
//     -> one result row of N_OUT values per sequence
//
// Data moves as rows, one time step per row, with a valid/ready handshake
// between every pair of layers, so each layer works on a different time step
// (or a different sequence) at the same time. The defaults describe the
// gravitational-wave model: 100 time steps of 2 inputs, hidden width 32, two
// blocks, one sigmoid output. Head count, head width, feed-forward width and
// the classifier's hidden width are not given for that model and are chosen
// here (HEADS = 2, DK = 4, FF = 16, HID = 16).
//
// Weights, biases, gamma and beta are written through the configuration bus
// (one data_t word per cycle while cfg_we is high) before data is streamed;
// the address map is, from 0: input projection, block 0 .. block NBLK-1, output
// head, each laid out as documented in its module. TOTAL_WORDS is the size.
//
// Timing (REUSE = 1): rows are taken at one per cycle while the attention
// heads of block 0 load K/V. From the clock edge that takes the first row of a
// sequence to the edge that takes its result there are
// 1 + NBLK * (SEQ + 23) + SEQ + 3 cycles (350 at the defaults), and a new
// sequence can start every 2 * SEQ + 5 cycles (205), because each head's K/V
// load and attend phases do not overlap. The layer order and the model sizes
// follow the paper; the embedding layer, the configuration bus and the
// handshake are this design's choices.
module transformer_top
  import tf_pkg::*;
#(
  parameter int SEQ         = 100,
  parameter int IN_DIM      = 2,
  parameter int D           = 32,
  parameter int NBLK        = 2,
  parameter int HEADS       = 2,
  parameter int DK          = 4,
  parameter int FF          = 16,
  parameter int HID         = 16,
  parameter int N_OUT       = 1,
  parameter bit OUT_SOFTMAX = 1'b0,
  parameter bit LAYER_NORM  = 1'b1,
  parameter int REUSE       = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  cfg_addr_t          cfg_addr,
  input  data_t              cfg_data,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [IN_DIM-1:0] in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [N_OUT-1:0]  out_data
);
  localparam int EMB_WORDS   = dense_words(IN_DIM, D);
  localparam int BLK_WORDS   = block_words(D, HEADS, DK, FF);
  localparam int HEAD_BASE   = EMB_WORDS + NBLK * BLK_WORDS;
  localparam int TOTAL_WORDS = HEAD_BASE + head_words(D, HID, N_OUT);

  logic          [NBLK:0] s_valid, s_ready;
  data_t [NBLK:0][D-1:0]  s_data;

  dense #(.N_IN(IN_DIM), .N_OUT(D), .REUSE(REUSE), .RELU(1'b0), .BASE(0)) u_embed (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid, .in_ready, .in_data,
    .out_valid(s_valid[0]), .out_ready(s_ready[0]), .out_data(s_data[0])
  );

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    logic loading;
    transformer_block #(.SEQ(SEQ), .D(D), .HEADS(HEADS), .DK(DK), .FF(FF),
                        .REUSE(REUSE), .LAYER_NORM(LAYER_NORM),
                        .BASE(EMB_WORDS + b * BLK_WORDS)) u_block (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
      .in_valid (s_valid[b]),   .in_ready (s_ready[b]),   .in_data (s_data[b]),
      .out_valid(s_valid[b+1]), .out_ready(s_ready[b+1]), .out_data(s_data[b+1]),
      .loading
    );
  end

  output_head #(.SEQ(SEQ), .D(D), .HID(HID), .N_OUT(N_OUT), .OUT_SOFTMAX(OUT_SOFTMAX),
                .REUSE(REUSE), .BASE(HEAD_BASE)) u_head (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(s_valid[NBLK]), .in_ready(s_ready[NBLK]), .in_data(s_data[NBLK]),
    .out_valid, .out_ready, .out_data
  );
endmodule
