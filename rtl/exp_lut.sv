// exp_lut: LANES parallel look-ups into one exponent table.
//
// The table has TABLE_SIZE entries covering inputs in [-8, 8) in steps of
// 1/64; entry i holds e^x for the lower edge x of bin i, as an unsigned
// exp_t (12 integer, 8 fractional bits). Inputs outside the range are clipped
// to the first or last bin. The entries are computed at elaboration time by
// tf_pkg::exp_table_entry. Purely combinational.
module exp_lut
  import tf_pkg::*;
#(
  parameter int LANES = 4
) (
  input  data_t [LANES-1:0] x,
  output exp_t  [LANES-1:0] y
);
  exp_t table_q [TABLE_SIZE];

  for (genvar i = 0; i < TABLE_SIZE; i++) begin : g_entry
    localparam exp_t VAL = exp_table_entry(i);
    assign table_q[i] = VAL;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign y[l] = table_q[table_index(x[l])];
  end
endmodule
