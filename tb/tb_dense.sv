// tb_dense: two dense layers (5 inputs, 3 outputs), one fully parallel
// (reuse 1) and one with reuse factor 3, loaded with random weights through the
// configuration bus. Random rows, including large ones that saturate, are
// streamed with random output back-pressure; every output is compared with an
// integer reference (exact products and sums, floor, saturate, optional ReLU).
// The cycle counts are checked: latency 1 and one row per cycle for reuse 1,
// latency 3 and interval 4 for reuse 3.
module tb_dense;
  import tf_pkg::*;
  localparam int NI = 5, NO = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;

  logic [1:0] in_valid, in_ready, out_valid, out_ready;
  data_t [NI-1:0] in_data [2];
  data_t [NO-1:0] out_data [2];

  dense #(.N_IN(NI), .N_OUT(NO), .REUSE(1), .RELU(1'b0), .BASE(0)) dut0 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_data(in_data[0]),
    .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out_data(out_data[0]));
  dense #(.N_IN(NI), .N_OUT(NO), .REUSE(3), .RELU(1'b1), .BASE(100)) dut1 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_data(in_data[1]),
    .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out_data(out_data[1]));

  int checks = 0, failures = 0;
  longint w [2][NI*NO+NO];
  data_t [NO-1:0] expq [2][$];
  longint t_in [2][$];
  longint cycle = 0;
  always @(posedge clk) cycle++;

  function automatic data_t [NO-1:0] ref_row(input int k, input data_t [NI-1:0] x);
    data_t [NO-1:0] y;
    for (int o = 0; o < NO; o++) begin
      longint s = w[k][NI*NO+o] * 1024;
      for (int i = 0; i < NI; i++) s += w[k][o*NI+i] * longint'(x[i]);
      s = s >>> 10;
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      if (k == 1 && s < 0) s = 0;
      y[o] = data_t'(s);
    end
    return y;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor outputs
  for (genvar k = 0; k < 2; k++) begin : g_mon
    always @(posedge clk) if (rst_n && out_valid[k] && out_ready[k]) begin
      checks++;
      if (expq[k].size() == 0 || out_data[k] != expq[k][0]) begin
        failures++; $display("dut%0d mismatch", k);
      end
      if (expq[k].size() != 0) void'(expq[k].pop_front());
    end
  end

  task automatic cfg_write(input int a, input longint v);
    cfg_we = 1; cfg_addr = cfg_addr_t'(a); cfg_data = data_t'(v);
    @(posedge clk); #1;
    cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    in_valid = '0; out_ready = '1; in_data[0] = '0; in_data[1] = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int k = 0; k < 2; k++)
      for (int a = 0; a < NI*NO+NO; a++) begin
        w[k][a] = longint'($urandom_range(0, 4095)) - 2048;   // [-2, 2)
        cfg_write(k * 100 + a, w[k][a]);
      end
    // ---- latency: one row into each, output always ready ----
    for (int k = 0; k < 2; k++) begin
      longint t0;
      for (int i = 0; i < NI; i++) in_data[k][i] = data_t'($urandom_range(0, 4095) - 2048);
      expq[k].push_back(ref_row(k, in_data[k]));
      in_valid[k] = 1;
      @(posedge clk); #1;
      in_valid[k] = 0;
      t0 = cycle;
      while (!out_valid[k]) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != ((k == 0) ? 0 : 3)) begin
        failures++; $display("dut%0d latency %0d", k, cycle - t0);
      end
      @(posedge clk); #1;
    end
    // ---- throughput: 12 back-to-back rows into the reuse-3 layer ----
    begin
      longint t0, t1; int n;
      n = 0; t0 = 0; t1 = 0;
      in_valid[1] = 1;
      while (n < 12) begin
        for (int i = 0; i < NI; i++) in_data[1][i] = data_t'($urandom_range(0, 4095) - 2048);
        #1;
        while (!in_ready[1]) begin @(posedge clk); #1; end
        expq[1].push_back(ref_row(1, in_data[1]));
        if (n == 0) t0 = cycle;
        t1 = cycle;
        @(posedge clk); #1; n++;
      end
      in_valid[1] = 0;
      checks++;
      // 11 intervals of REUSE + 1 = 4 cycles between the first and last row
      if (t1 - t0 != 44) begin
        failures++; $display("reuse-3: %0d cycles from first to 12th row", t1 - t0);
      end
    end
    repeat (10) @(posedge clk); #1;
    // ---- random traffic with back-pressure, large inputs ----
    for (int r = 0; r < 400; r++) begin
      for (int k = 0; k < 2; k++) begin
        out_ready[k] = ($urandom_range(0, 2) != 0);
        if (!in_valid[k] || in_ready[k]) begin
          in_valid[k] = ($urandom_range(0, 1) != 0);
          for (int i = 0; i < NI; i++) in_data[k][i] = data_t'($urandom);
        end
      end
      #1;
      for (int k = 0; k < 2; k++)
        if (in_valid[k] && in_ready[k]) expq[k].push_back(ref_row(k, in_data[k]));
      @(posedge clk); #1;
    end
    in_valid = '0; out_ready = '1;
    repeat (20) @(posedge clk);
    checks++;
    if (expq[0].size() != 0 || expq[1].size() != 0) begin
      failures++; $display("outputs missing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
