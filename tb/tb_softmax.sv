// tb_softmax: rows of 8 random scores (mostly in [-4, 4), some beyond the
// table range) through the softmax, with random output back-pressure. Each
// output is compared with a floating-point softmax (inputs clipped to [-8, 8))
// within 3% + 4 LSB; each row's probabilities must sum to 1 within 4%. The
// latency (3 cycles) and full throughput (8 rows in 8 cycles) are checked.
module tb_softmax;
  import tf_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  data_t [K-1:0] in_data, out_data;

  softmax #(.K(K)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;
  rvec_t expq [$];
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    rvec_t e;
    real sum, got;
    sum = 0.0;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      for (int j = 0; j < K; j++) begin
        got = real'(out_data[j]) * LSB;
        sum += got;
        checks++;
        if (got - e[j] > 0.03 * e[j] + 4 * LSB || e[j] - got > 0.03 * e[j] + 4 * LSB) begin
          failures++; $display("p[%0d] = %f expected %f", j, got, e[j]);
        end
      end
      checks++;
      if (sum < 0.96 || sum > 1.04) begin failures++; $display("sum %f", sum); end
    end
  end
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;
  logic took = 0;
  always @(posedge clk) took <= in_valid && in_ready;

  task automatic new_row(input bit wide);
    rvec_t z = new[K];
    for (int j = 0; j < K; j++) begin
      int v = wide ? ($urandom_range(0, 24575) - 12288) : ($urandom_range(0, 8191) - 4096);
      in_data[j] = data_t'(v);
      z[j] = real'(in_data[j]) * LSB;
    end
    expq.push_back(softmax_vec(z));
  endtask

  initial begin
    in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    // latency
    begin
      longint t0;
      new_row(0);
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      t0 = cycle;
      while (!out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != 2) begin failures++; $display("latency %0d", cycle - t0 + 1); end
      @(posedge clk); #1;
    end
    // throughput: 8 rows on 8 consecutive edges
    begin
      longint t0, t1; int n;
      n = 0; t0 = 0; t1 = 0;
      in_valid = 1;
      while (n < 8) begin
        new_row(0);
        if (n == 0) t0 = cycle;
        t1 = cycle;
        @(posedge clk); #1; n++;
      end
      in_valid = 0;
      checks++;
      if (t1 - t0 != 7) begin failures++; $display("8 rows took %0d cycles", t1 - t0 + 1); end
      repeat (5) @(posedge clk); #1;
    end
    // random traffic with back-pressure; a presented row is held until taken
    for (int r = 0; r < 600; r++) begin
      if (!in_valid || took) begin
        in_valid = ($urandom_range(0, 1) != 0);
        if (in_valid) new_row(r % 5 == 0);
      end
      out_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk); #1;
    end
    // let a row still on offer be taken
    out_ready = 1;
    while (in_valid && !took) begin @(posedge clk); #1; end
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d rows missing", expq.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
