// recip_lut: reciprocal of an unsigned integer through a normalised table.
//
// The input v (VW bits) is normalised by its leading one: v ~ m * 2^e with the
// mantissa m in [2^(TABLE_BITS-1), 2^TABLE_BITS) (low bits below the mantissa
// are dropped). A table of 2^(TABLE_BITS-1) entries holds
// r = round(2^(2*TABLE_BITS) / m), so 1/v ~ r * 2^-(2*TABLE_BITS + e).
// Outputs: r (TABLE_BITS+2 bits) and the signed exponent e. v = 0 gives r = 0.
// Purely combinational. The normalisation is this design's choice; the table
// itself is the "inversion lookup table".
module recip_lut
  import tf_pkg::*;
#(
  parameter int VW = 24
) (
  input  logic [VW-1:0]            v,
  output logic [TABLE_BITS+1:0]    r,
  output logic signed [15:0]       e
);
  localparam int HALF = TABLE_SIZE / 2;
  logic [TABLE_BITS+1:0] table_q [HALF];

  for (genvar i = 0; i < HALF; i++) begin : g_entry
    localparam logic [TABLE_BITS+1:0] VAL = (TABLE_BITS+2)'(recip_table_entry(HALF + i));
    assign table_q[i] = VAL;
  end

  int msb;
  logic [TABLE_BITS-1:0] m;

  always_comb begin
    msb = -1;
    for (int b = 0; b < VW; b++) if (v[b]) msb = b;
    e = 16'(msb - (TABLE_BITS - 1));
    if (msb >= TABLE_BITS - 1) m = TABLE_BITS'(v >> (msb - (TABLE_BITS - 1)));
    else                       m = TABLE_BITS'(v << ((TABLE_BITS - 1) - msb));
    r = (msb < 0) ? '0 : table_q[m[TABLE_BITS-2:0]];
  end
endmodule
