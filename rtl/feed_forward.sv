// feed_forward: the feed-forward layer of a transformer block, two dense
// layers D -> FF (with ReLU) -> D applied to every row.
//
// Configuration words from BASE: the first dense layer (dense_words(D, FF)),
// then the second. Timing with REUSE = 1: latency 2 cycles, one row per
// cycle. The paper names this layer only (it is existing hls4ml
// functionality); the two-layer form and the ReLU are this design's choices.
module feed_forward
  import tf_pkg::*;
#(
  parameter int D     = 32,
  parameter int FF    = 16,
  parameter int REUSE = 1,
  parameter int BASE  = 0
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
  output data_t [D-1:0]  out_data
);
  logic           h_valid, h_ready;
  data_t [FF-1:0] h_data;

  dense #(.N_IN(D), .N_OUT(FF), .REUSE(REUSE), .RELU(1'b1), .BASE(BASE)) u_fc1 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid, .in_ready, .in_data,
    .out_valid(h_valid), .out_ready(h_ready), .out_data(h_data)
  );

  dense #(.N_IN(FF), .N_OUT(D), .REUSE(REUSE), .RELU(1'b0),
          .BASE(BASE + dense_words(D, FF))) u_fc2 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(h_valid), .in_ready(h_ready), .in_data(h_data),
    .out_valid, .out_ready, .out_data
  );
endmodule
