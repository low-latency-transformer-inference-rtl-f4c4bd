// rsqrt_lut: reciprocal square root of an unsigned integer through a
// normalised table.
//
// The input v (VW bits) is normalised by an even shift: v ~ m * 4^s with the
// mantissa m in [2^(TABLE_BITS-2), 2^TABLE_BITS). A table of TABLE_SIZE
// entries holds r = round(2^(2*TABLE_BITS) / sqrt(m)), so
// 1/sqrt(v) ~ r * 2^-(2*TABLE_BITS + s). Outputs: r and the signed shift s.
// v = 0 gives the largest entry. Purely combinational. The normalisation is
// this design's choice; the table is the layer normalisation's 1/sqrt LUT.
module rsqrt_lut
  import tf_pkg::*;
#(
  parameter int VW = 32
) (
  input  logic [VW-1:0]          v,
  output logic [2*TABLE_BITS:0]  r,
  output logic signed [15:0]     s
);
  logic [2*TABLE_BITS:0] table_q [TABLE_SIZE];

  for (genvar i = 0; i < TABLE_SIZE; i++) begin : g_entry
    localparam logic [2*TABLE_BITS:0] VAL = (2*TABLE_BITS+1)'(rsqrt_table_entry(i));
    assign table_q[i] = VAL;
  end

  int msb, sh;
  logic [TABLE_BITS-1:0] m;

  always_comb begin
    msb = -1;
    for (int b = 0; b < VW; b++) if (v[b]) msb = b;
    // shift so the leading one lands in bit TABLE_BITS-1 or TABLE_BITS-2
    sh = msb - (TABLE_BITS - 1);
    if (sh[0]) sh = sh + 1;            // make the shift even (rounds towards +inf)
    if (sh >= 0) m = TABLE_BITS'(v >> sh);
    else         m = TABLE_BITS'(v << (-sh));
    s = 16'(sh / 2);
    r = table_q[m];
  end
endmodule
