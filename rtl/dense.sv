// dense: the Linear layer, y = W x + b on one row (time step) per operation,
// with an optional ReLU on the output.
//
// Weights W[o][i] and biases b[o] sit in a register file written through the
// configuration bus: word BASE + o*N_IN + i holds W[o][i], word
// BASE + N_IN*N_OUT + o holds b[o]. The layer reads all of them in parallel.
//
// REUSE is the reuse factor: each multiplier serves REUSE products of one row,
// so the layer has N_OUT * ceil(N_IN/REUSE) multipliers and needs REUSE cycles
// of work per row. In cycle r of a row the inputs i with i mod REUSE == r are
// multiplied and added into the accumulators. With REUSE = 1 the whole row is
// computed combinationally and registered (fully parallel).
//
// Arithmetic: products are exact (2*DATA_F fractional bits), sums are exact;
// the result is floored to DATA_F fractional bits and saturated to data_t.
//
// Timing: REUSE = 1: latency 1 cycle, one row per cycle. REUSE > 1: the
// result of a row accepted at clock edge t is valid after edge t + REUSE, and
// the next row is accepted at edge t + REUSE + 1 at the earliest, so the
// interval is REUSE + 1 cycles.
// Handshake: valid/ready on both sides; in_ready may depend on out_ready.
//
// The layer's function and the reuse trade-off follow the paper; the
// configuration bus, the interleaved assignment of products to cycles and the
// rounding are this design's choices.
module dense
  import tf_pkg::*;
#(
  parameter int N_IN  = 4,
  parameter int N_OUT = 4,
  parameter int REUSE = 1,
  parameter bit RELU  = 1'b0,
  parameter int BASE  = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration bus
  input  logic              cfg_we,
  input  cfg_addr_t         cfg_addr,
  input  data_t             cfg_data,
  // input row
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t [N_IN-1:0]  in_data,
  // output row
  output logic              out_valid,
  input  logic              out_ready,
  output data_t [N_OUT-1:0] out_data
);
  localparam int NW   = dense_words(N_IN, N_OUT);
  localparam int ACCW = 2 * DATA_W + $clog2(N_IN + 2) + 1;
  localparam int NCH  = (N_IN + REUSE - 1) / REUSE;   // multipliers per output

  typedef logic signed [ACCW-1:0] acc_t;

  data_t wmem [NW];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_hit(cfg_addr, BASE, NW))
      wmem[cfg_local(cfg_addr, BASE, NW)] <= cfg_data;
  end

  function automatic data_t finish(input acc_t a);
    data_t y;
    y = sat_data(longint'(a) >>> DATA_F);
    if (RELU && y < 0) y = '0;
    return y;
  endfunction

  if (REUSE <= 1) begin : g_parallel
    acc_t sum [N_OUT];
    always_comb begin
      for (int o = 0; o < N_OUT; o++) begin
        sum[o] = acc_t'(wmem[N_IN * N_OUT + o]) <<< DATA_F;
        for (int i = 0; i < N_IN; i++)
          sum[o] += acc_t'(wmem[o * N_IN + i]) * acc_t'(in_data[i]);
      end
    end

    assign in_ready = !out_valid || out_ready;

    always_ff @(posedge clk) begin
      if (!rst_n) out_valid <= 1'b0;
      else if (in_ready) out_valid <= in_valid;
    end

    always_ff @(posedge clk) begin
      if (in_ready && in_valid)
        for (int o = 0; o < N_OUT; o++) out_data[o] <= finish(sum[o]);
    end
  end else begin : g_reuse
    localparam int RW = $clog2(REUSE);
    logic            busy;
    logic [RW-1:0]   r;
    data_t [N_IN-1:0] x_q;
    acc_t            acc  [N_OUT];
    acc_t            part [N_OUT];

    // products handled in this cycle: inputs r, r+REUSE, r+2*REUSE, ...
    always_comb begin
      for (int o = 0; o < N_OUT; o++) begin
        part[o] = acc[o];
        for (int c = 0; c < NCH; c++) begin
          if (c * REUSE + int'(r) < N_IN)
            part[o] += acc_t'(wmem[o * N_IN + c * REUSE + int'(r)])
                     * acc_t'(x_q[c * REUSE + int'(r)]);
        end
      end
    end

    assign in_ready = !busy && (!out_valid || out_ready);

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        busy      <= 1'b0;
        r         <= '0;
        out_valid <= 1'b0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (in_valid && in_ready) begin
          busy <= 1'b1;
          r    <= '0;
        end else if (busy) begin
          if (r == RW'(REUSE - 1)) begin
            busy      <= 1'b0;
            out_valid <= 1'b1;
          end
          r <= r + 1'b1;
        end
      end
    end

    always_ff @(posedge clk) begin
      if (in_valid && in_ready) begin
        x_q <= in_data;
        for (int o = 0; o < N_OUT; o++)
          acc[o] <= acc_t'(wmem[N_IN * N_OUT + o]) <<< DATA_F;
      end else if (busy) begin
        for (int o = 0; o < N_OUT; o++) acc[o] <= part[o];
        if (r == RW'(REUSE - 1))
          for (int o = 0; o < N_OUT; o++) out_data[o] <= finish(part[o]);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));
endmodule
