// sigmoid_lut: LANES parallel look-ups into one sigmoid table.
//
// The table has TABLE_SIZE entries covering inputs in [-8, 8) in steps of
// 1/64; entry i holds 1/(1+e^-x) at the centre x of bin i, as data_t. Inputs
// outside the range are clipped to the end bins. The entries are computed at
// elaboration time by tf_pkg::sigmoid_table_entry. Purely combinational.
module sigmoid_lut
  import tf_pkg::*;
#(
  parameter int LANES = 1
) (
  input  data_t [LANES-1:0] x,
  output data_t [LANES-1:0] y
);
  data_t table_q [TABLE_SIZE];

  for (genvar i = 0; i < TABLE_SIZE; i++) begin : g_entry
    localparam data_t VAL = sigmoid_table_entry(i);
    assign table_q[i] = VAL;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign y[l] = table_q[table_index(x[l])];
  end
endmodule
