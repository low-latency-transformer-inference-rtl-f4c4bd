// tb_residual_add: the adding layer joins two row streams that arrive with
// independent random gaps, under random back-pressure. Every output element
// must equal the saturated sum of the matching input rows (exact integer
// reference); saturation in both directions is exercised and counted.
module tb_residual_add;
  import tf_pkg::*;
  localparam int D = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_valid, a_ready, b_valid, b_ready, out_valid, out_ready;
  data_t [D-1:0] a_data, b_data, out_data;

  residual_add #(.D(D)) dut (.*);

  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0, n_a = 0, n_b = 0, n_o = 0;
  data_t [D-1:0] qa [$], qb [$];
  logic took_a = 0, took_b = 0;
  always @(posedge clk) begin took_a <= a_valid && a_ready; took_b <= b_valid && b_ready; end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (a_valid && a_ready) begin qa.push_back(a_data); n_a++; end
    if (b_valid && b_ready) begin qb.push_back(b_data); n_b++; end
    checks++;
    if ((a_valid && a_ready) != (b_valid && b_ready)) begin failures++; $display("join broken"); end
    if (out_valid && out_ready) n_o++;
  end

  // expected output is formed from the rows taken on the previous edge
  data_t [D-1:0] exp_row;
  logic exp_pending = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (!exp_pending || out_data != exp_row) begin failures++; $display("sum mismatch"); end
    end
  end
  always @(posedge clk) if (rst_n && a_valid && a_ready) begin
    for (int j = 0; j < D; j++) begin
      longint s;
      s = longint'(a_data[j]) + longint'(b_data[j]);
      if (s > 32767) begin s = 32767; sat_hi++; end
      if (s < -32768) begin s = -32768; sat_lo++; end
      exp_row[j] <= data_t'(s);
    end
    exp_pending <= 1;
  end

  initial begin
    a_valid = 0; b_valid = 0; out_ready = 1; a_data = '0; b_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int r = 0; r < 2000; r++) begin
      if (!a_valid || took_a) begin
        a_valid = ($urandom_range(0, 2) != 0);
        for (int j = 0; j < D; j++) a_data[j] = data_t'($urandom);
      end
      if (!b_valid || took_b) begin
        b_valid = ($urandom_range(0, 2) != 0);
        for (int j = 0; j < D; j++) b_data[j] = data_t'($urandom);
      end
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
    end
    a_valid = 0; b_valid = 0; out_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (n_o != n_a || n_o < 100) begin failures++; $display("%0d outputs for %0d inputs", n_o, n_a); end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
