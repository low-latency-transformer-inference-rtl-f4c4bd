// row_fifo: the FIFO memory placed between two pipeline stages.
//
// A row (one time step of a layer's output, LANES values of data_t) is written
// when in_valid && in_ready and read when out_valid && out_ready. Storage is
// LANES narrow FIFOs stacked side by side that share one write and one read
// pointer, so a whole row moves per cycle; this is the "several FIFOs stacked
// to raise bandwidth" arrangement of the streaming layers. How many lanes the
// stack has is set by the producing layer's row width (the paper ties it to the
// reuse factor and the layer's output count; with reuse 1 that is one lane per
// output). Depth, pointer layout and the valid/ready handshake are this
// design's choices.
//
// Timing: the read data is the registered head entry, so a row written in
// cycle t can be read in cycle t+1 at the earliest. Full throughput (one row per
// cycle) is sustained while neither side stalls. in_ready is low only when the
// FIFO holds DEPTH rows; a write and a read in the same cycle are allowed then
// too (the read frees the slot).
module row_fifo
  import tf_pkg::*;
#(
  parameter int LANES = 4,
  parameter int DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t [LANES-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output data_t [LANES-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [PW-1:0] wr_ptr, rd_ptr;
  logic push, pop;

  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_valid = (count != 0);
  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH)) || out_ready;

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  // one narrow FIFO per lane
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    data_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (push) mem[wr_ptr] <= in_data[l];
    end
    assign out_data[l] = mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // a push while full is only legal together with a pop
  assert property (@(posedge clk) disable iff (!rst_n)
                   (push && count == ($clog2(DEPTH+1))'(DEPTH)) |-> pop);
endmodule
