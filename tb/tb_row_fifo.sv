// tb_row_fifo: random traffic through a 3-lane, 4-deep row FIFO, checked
// against a queue model: data order, occupancy count, and the full/empty
// handshake (in_ready low only when full and not being read).
module tb_row_fifo;
  import tf_pkg::*;
  localparam int LANES = 3, DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  data_t [LANES-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  row_fifo #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, fulls = 0;
  data_t [LANES-1:0] model [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // drive inputs just after the edge
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = (cyc < 1500) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      for (int l = 0; l < LANES; l++) in_data[l] = data_t'($urandom);
      #1;
      checks++;
      if (count != ($bits(count))'(model.size())) begin
        failures++; $display("count %0d model %0d", count, model.size());
      end
      checks++;
      if (in_ready != (model.size() < DEPTH || out_ready)) begin
        failures++; $display("in_ready wrong at size %0d", model.size());
      end
      checks++;
      if (out_valid != (model.size() != 0)) failures++;
      if (model.size() == DEPTH) fulls++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) begin
          failures++; $display("data mismatch");
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      #1;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FIFO never filled"); end
    $display("full cycles: %0d", fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
