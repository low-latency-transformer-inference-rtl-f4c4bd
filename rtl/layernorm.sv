// layernorm: layer normalisation of one row of D values per cycle,
// out[j] = (x[j] - mean) / sqrt(var) * gamma[j] + beta[j], in five stages.
//
//   stage 1  mean calc unit: sum of the D inputs times the constant 1/D;
//            the row is kept in the input buffer
//   stage 2  DM calc unit: deviation from the mean, dm[j] = x[j] - mean
//   stage 3  var calc unit: sum of dm[j]^2 times 1/D; dm is kept in the
//            DM buffer
//   stage 4  1/sqrt(var) from a lookup table (rsqrt_lut), multiplied into
//            every dm[j]: the normalised row
//   stage 5  element-wise scale by gamma and offset by beta
//
// gamma[j] is configuration word BASE + j, beta[j] is BASE + D + j.
//
// Formats: mean and dm keep DATA_F fractional bits (dm one bit wider than
// data_t); var is exact with 2*DATA_F fractional bits apart from the floor of
// the 1/D multiply (1/D held with RECIP_F = 16 fractional bits). The inverse
// square root is a table mantissa and a shift; the normalised value and the
// output are floored and saturated to data_t. No epsilon is added to var.
//
// Timing: latency 5 cycles, one row per cycle; all stages stall together when
// the output is not taken. The stage split follows the paper; the formats and
// the normalised table are this design's choices.
module layernorm
  import tf_pkg::*;
#(
  parameter int D    = 32,
  parameter int BASE = 0
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
  localparam int     RECIP_F = 16;
  localparam longint RECIP   = ((longint'(1) <<< RECIP_F) + longint'(D) / 2) / longint'(D);
  localparam int     VW      = 2 * (DATA_W + 1) + $clog2(D + 1);

  data_t gb [2 * D];
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_hit(cfg_addr, BASE, 2 * D))
      gb[cfg_local(cfg_addr, BASE, 2 * D)] <= cfg_data;
  end

  logic adv, v1, v2, v3, v4;
  assign adv      = !out_valid || out_ready;
  assign in_ready = adv;

  typedef logic signed [DATA_W:0] dm_t;

  // stage 1
  data_t [D-1:0] x1;
  data_t         mean1;
  longint        sum_x;
  always_comb begin
    sum_x = 0;
    for (int j = 0; j < D; j++) sum_x += longint'(in_data[j]);
  end

  // stage 2
  dm_t dm2 [D];

  // stage 3
  dm_t dm3 [D];
  logic [VW-1:0] var3;
  longint sum_sq;
  always_comb begin
    sum_sq = 0;
    for (int j = 0; j < D; j++) sum_sq += longint'(dm2[j]) * longint'(dm2[j]);
  end

  // stage 4
  logic [2*TABLE_BITS:0] r_lut;
  logic signed [15:0]    s_lut;
  data_t [D-1:0]         xn4;
  rsqrt_lut #(.VW(VW)) u_rsqrt (.v(var3), .r(r_lut), .s(s_lut));

  function automatic data_t normalise(input dm_t dm, input logic [2*TABLE_BITS:0] r,
                                      input logic signed [15:0] s);
    longint p;
    int sh;
    p  = longint'(dm) * longint'(r);
    sh = 2 * TABLE_BITS + int'(s) - DATA_F;
    if (sh >= 0) return sat_data(p >>> sh);
    return sat_data(p <<< (-sh));
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; v4 <= 1'b0; out_valid <= 1'b0;
    end else if (adv) begin
      v1 <= in_valid; v2 <= v1; v3 <= v2; v4 <= v3; out_valid <= v4;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      // stage 1: mean and input buffer
      x1    <= in_data;
      mean1 <= sat_data((sum_x * RECIP) >>> RECIP_F);
      // stage 2: deviations
      for (int j = 0; j < D; j++) dm2[j] <= dm_t'(x1[j]) - dm_t'(mean1);
      // stage 3: variance and DM buffer
      for (int j = 0; j < D; j++) dm3[j] <= dm2[j];
      var3 <= VW'((sum_sq * RECIP) >>> RECIP_F);
      // stage 4: normalise
      for (int j = 0; j < D; j++) xn4[j] <= normalise(dm3[j], r_lut, s_lut);
      // stage 5: gamma and beta
      for (int j = 0; j < D; j++)
        out_data[j] <= sat_data(((longint'(xn4[j]) * longint'(gb[j])) >>> DATA_F)
                                + longint'(gb[D + j]));
    end
  end
endmodule
