// output_head: the classifier after the last transformer block.
//
// The SEQ rows of a sequence are averaged into one row (global average
// pooling: running sum, then times the constant 1/SEQ), which passes through
// two dense layers D -> HID (ReLU) -> N_OUT and the final activation:
// a sigmoid table per output (OUT_SOFTMAX = 0, the gravitational-wave model)
// or a softmax over the N_OUT outputs (OUT_SOFTMAX = 1, the engine and
// b-tagging classifiers). One result row per sequence.
//
// Configuration words from BASE: the first dense layer, then the second.
//
// Timing (REUSE = 1): the pooled row is ready 1 cycle after the last row of
// the sequence; then 2 dense cycles and 1 cycle (sigmoid) or 3 cycles
// (softmax). The two dense layers and the final sigmoid/softmax follow the
// paper's model descriptions; how the sequence is reduced to one row is not
// stated there, and average pooling is this design's choice.
module output_head
  import tf_pkg::*;
#(
  parameter int SEQ         = 100,
  parameter int D           = 32,
  parameter int HID         = 16,
  parameter int N_OUT       = 1,
  parameter bit OUT_SOFTMAX = 1'b0,
  parameter int REUSE       = 1,
  parameter int BASE        = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  cfg_addr_t          cfg_addr,
  input  data_t              cfg_data,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [D-1:0]      in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [N_OUT-1:0]  out_data
);
  localparam int     RECIP_F = 16;
  localparam longint RECIP   = ((longint'(1) <<< RECIP_F) + longint'(SEQ) / 2) / longint'(SEQ);
  localparam int     CW      = $clog2(SEQ + 1);

  // ---------------- average pooling ----------------
  logic          pool_valid, pool_ready;
  data_t [D-1:0] pool_data;
  longint        acc [D];
  logic [CW-1:0] cnt;

  assign in_ready = !pool_valid || pool_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt        <= '0;
      pool_valid <= 1'b0;
    end else begin
      if (pool_valid && pool_ready) pool_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (cnt == CW'(SEQ - 1)) begin
          cnt        <= '0;
          pool_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int j = 0; j < D; j++) begin
        longint s;
        s = ((cnt == '0) ? 0 : acc[j]) + longint'(in_data[j]);
        acc[j] <= s;
        if (cnt == CW'(SEQ - 1)) pool_data[j] <= sat_data((s * RECIP) >>> RECIP_F);
      end
    end
  end

  // ---------------- two dense layers ----------------
  logic            h_valid, h_ready, z_valid, z_ready;
  data_t [HID-1:0] h_data;
  data_t [N_OUT-1:0] z_data;

  dense #(.N_IN(D), .N_OUT(HID), .REUSE(REUSE), .RELU(1'b1), .BASE(BASE)) u_fc1 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(pool_valid), .in_ready(pool_ready), .in_data(pool_data),
    .out_valid(h_valid), .out_ready(h_ready), .out_data(h_data)
  );

  dense #(.N_IN(HID), .N_OUT(N_OUT), .REUSE(REUSE), .RELU(1'b0),
          .BASE(BASE + dense_words(D, HID))) u_fc2 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(h_valid), .in_ready(h_ready), .in_data(h_data),
    .out_valid(z_valid), .out_ready(z_ready), .out_data(z_data)
  );

  // ---------------- final activation ----------------
  if (OUT_SOFTMAX) begin : g_softmax
    softmax #(.K(N_OUT)) u_sm (
      .clk, .rst_n,
      .in_valid(z_valid), .in_ready(z_ready), .in_data(z_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_sigmoid
    data_t [N_OUT-1:0] sig;
    sigmoid_lut #(.LANES(N_OUT)) u_sig (.x(z_data), .y(sig));
    assign z_ready = !out_valid || out_ready;
    always_ff @(posedge clk) begin
      if (!rst_n) out_valid <= 1'b0;
      else if (z_ready) out_valid <= z_valid;
    end
    always_ff @(posedge clk) begin
      if (z_ready && z_valid) out_data <= sig;
    end
  end
endmodule
