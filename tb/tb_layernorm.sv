// tb_layernorm: layer normalisation over rows of 8 values with random gamma
// and beta loaded through the configuration bus. Random rows of several
// scales (including a constant row, variance 0) go through with random
// back-pressure; outputs are compared with a floating-point layer norm within
// 2% of the normalised value plus 0.02. Latency (5 cycles) and full throughput
// are checked.
module tb_layernorm;
  import tf_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t [D-1:0] in_data, out_data;

  layernorm #(.D(D), .BASE(40)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;
  rvec_t w = new[40 + 2 * D];
  rvec_t expq [$];
  longint cycle = 0;
  logic took = 0;
  always @(posedge clk) cycle++;
  always @(posedge clk) took <= in_valid && in_ready;
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    rvec_t e;
    real got, tol;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      for (int j = 0; j < D; j++) begin
        got = real'(out_data[j]) * LSB;
        tol = 0.02 + 0.02 * ((e[j] < 0.0) ? -e[j] : e[j]);
        checks++;
        if (got - e[j] > tol || e[j] - got > tol) begin
          failures++; $display("y[%0d] = %f expected %f", j, got, e[j]);
        end
      end
    end
  end

  task automatic new_row(input int kind);
    rvec_t x = new[D];
    int amp;
    amp = (kind == 0) ? 256 : (kind == 1) ? 4096 : 16384;
    for (int j = 0; j < D; j++) begin
      in_data[j] = (kind == 3) ? data_t'(700) : data_t'($urandom_range(0, 2 * amp) - amp);
      x[j] = real'(in_data[j]) * LSB;
    end
    expq.push_back(layernorm(x, 1, D, w, 40));
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int j = 0; j < 2 * D; j++) begin
      int v;
      v = (j < D) ? ($urandom_range(0, 1024) + 512) : ($urandom_range(0, 1024) - 512);
      w[40 + j] = real'(v) * LSB;
      cfg_we = 1; cfg_addr = cfg_addr_t'(40 + j); cfg_data = data_t'(v);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    // latency
    begin
      longint t0;
      new_row(1);
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      t0 = cycle;
      while (!out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != 4) begin failures++; $display("latency %0d", cycle - t0 + 1); end
      @(posedge clk); #1;
    end
    // throughput: 6 rows on consecutive edges, all outputs on consecutive edges
    begin
      longint t0, t1; int n;
      n = 0; t0 = 0; t1 = 0;
      in_valid = 1;
      while (n < 6) begin
        new_row(n % 4);
        if (n == 0) t0 = cycle;
        t1 = cycle;
        @(posedge clk); #1; n++;
      end
      in_valid = 0;
      checks++;
      if (t1 - t0 != 5) begin failures++; $display("6 rows took %0d cycles", t1 - t0 + 1); end
      repeat (8) @(posedge clk); #1;
    end
    for (int r = 0; r < 500; r++) begin
      if (!in_valid || took) begin
        in_valid = ($urandom_range(0, 1) != 0);
        if (in_valid) new_row($urandom_range(0, 3));
      end
      out_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk); #1;
    end
    // let a row still on offer be taken
    out_ready = 1;
    while (in_valid && !took) begin @(posedge clk); #1; end
    in_valid = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d rows missing", expq.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
