// residual_add: the adding layer of a residual connection. Adds the layer's
// output row (a) and the skip-path row (b) element by element, saturating to
// data_t, and registers the sum.
//
// The two inputs are joined: a row is taken from both at once when both are
// valid and the output register is free. Latency 1 cycle, one row per cycle.
// The function is the paper's; the join handshake and saturation are this
// design's choices.
module residual_add
  import tf_pkg::*;
#(
  parameter int D = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           a_valid,
  output logic           a_ready,
  input  data_t [D-1:0]  a_data,
  input  logic           b_valid,
  output logic           b_ready,
  input  data_t [D-1:0]  b_data,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [D-1:0]  out_data
);
  logic take;
  assign take    = a_valid && b_valid && (!out_valid || out_ready);
  assign a_ready = b_valid && (!out_valid || out_ready);
  assign b_ready = a_valid && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (!out_valid || out_ready) out_valid <= a_valid && b_valid;
  end

  always_ff @(posedge clk) begin
    if (take)
      for (int j = 0; j < D; j++)
        out_data[j] <= sat_data(longint'(a_data[j]) + longint'(b_data[j]));
  end
endmodule
