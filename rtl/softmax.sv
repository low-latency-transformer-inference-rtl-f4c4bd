// softmax: S_i = e^{z_i} * (sum_j e^{z_j})^-1 over a row of K values, in three
// pipeline stages.
//
//   stage 1  K parallel look-ups into the exponent table (exp_lut); the results
//            are registered in the exp buffer.
//   stage 2  an adder tree sums the K exponents once; the sum is inverted by
//            the reciprocal table (recip_lut) and the inverse is registered
//            next to a second copy of the exp buffer.
//   stage 3  each buffered exponent is multiplied by the inverse; the products
//            are registered as the output row.
//
// This needs K operations per row instead of the K^2 of the older
// S_i = 1 / sum_j e^{z_j - z_i} form. As in that form, no maximum is
// subtracted first: inputs are clipped to the table range [-8, 8).
//
// Number formats: exponents are exp_t (unsigned 12.8); the inverse is kept
// as a mantissa r and a shift (see recip_lut), so stage 3 is
// S_i = (e_i * r) >> (2*TABLE_BITS + e - DATA_F), floored and saturated to
// data_t. A row whose exponents all underflow to zero gives an all-zero row.
//
// Timing: latency 3 cycles, one row per cycle. The three stages stall
// together when the output is not taken (in_ready = !out_valid || out_ready).
// The stage split and the two tables follow the paper's figure of this layer;
// table sizes, ranges and formats are this design's choices.
module softmax
  import tf_pkg::*;
#(
  parameter int K = 100
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t [K-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [K-1:0]  out_data
);
  localparam int SW = EXP_W + $clog2(K + 1);   // width of the exponent sum

  logic adv;
  logic v1, v2;

  assign adv      = !out_valid || out_ready;
  assign in_ready = adv;

  // ---------------- stage 1: exponent look-up and exp buffer ----------------
  exp_t [K-1:0] e_lut, e1;

  exp_lut #(.LANES(K)) u_exp (.x(in_data), .y(e_lut));

  // ---------------- stage 2: sum and inversion ----------------
  logic [SW-1:0]          sum;
  logic [TABLE_BITS+1:0]  r_lut, r2;
  logic signed [15:0]     e_lut_sh, e2;
  exp_t [K-1:0]           e2_buf;

  always_comb begin
    sum = '0;
    for (int j = 0; j < K; j++) sum += SW'(e1[j]);
  end

  recip_lut #(.VW(SW)) u_inv (.v(sum), .r(r_lut), .e(e_lut_sh));

  // ---------------- stage 3: element-wise multiply ----------------
  localparam int PW = EXP_W + TABLE_BITS + 2;
  function automatic data_t scale(input exp_t e, input logic [TABLE_BITS+1:0] r,
                                  input logic signed [15:0] sh_e);
    logic [PW-1:0] p;
    int sh;
    p  = PW'(e) * PW'(r);
    sh = 2 * TABLE_BITS + int'(sh_e) - DATA_F;
    if (sh >= 0) return sat_data(longint'(p >> sh));
    return sat_data(longint'(p) <<< (-sh));
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      v2        <= 1'b0;
      out_valid <= 1'b0;
    end else if (adv) begin
      v1        <= in_valid;
      v2        <= v1;
      out_valid <= v2;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      e1     <= e_lut;
      e2_buf <= e1;
      r2     <= r_lut;
      e2     <= e_lut_sh;
      for (int j = 0; j < K; j++) out_data[j] <= scale(e2_buf[j], r2, e2);
    end
  end
endmodule
