// tb_feed_forward: the feed-forward layer (8 -> 12 with ReLU -> 8) with random
// weights, random rows and random back-pressure. Outputs are compared with an
// exact integer model of the two dense layers (exact sums, floor, saturate,
// ReLU between). Latency (2 cycles) is checked.
module tb_feed_forward;
  import tf_pkg::*;
  localparam int D = 8, FF = 12, NW = D * FF + FF + FF * D + D;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t [D-1:0] in_data, out_data;

  feed_forward #(.D(D), .FF(FF), .REUSE(1), .BASE(7)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;
  longint w [NW];
  data_t [D-1:0] expq [$];
  longint cycle = 0;
  logic took = 0;
  always @(posedge clk) cycle++;
  always @(posedge clk) took <= in_valid && in_ready;
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;

  function automatic longint layer(input int base, input int ni, input int o,
                                   input longint x [], input bit relu);
    longint s;
    s = w[base + ni * ((base == 0) ? FF : D) + o] * 1024;
    for (int i = 0; i < ni; i++) s += w[base + o * ni + i] * x[i];
    s = s >>> 10;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (relu && s < 0) s = 0;
    return s;
  endfunction

  function automatic data_t [D-1:0] ref_row(input data_t [D-1:0] xin);
    longint x [] = new[D];
    longint h [] = new[FF];
    data_t [D-1:0] y;
    for (int i = 0; i < D; i++) x[i] = longint'(xin[i]);
    for (int o = 0; o < FF; o++) h[o] = layer(0, D, o, x, 1'b1);
    for (int o = 0; o < D; o++) y[o] = data_t'(layer(D * FF + FF, FF, o, h, 1'b0));
    return y;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0 || out_data != expq[0]) begin failures++; $display("mismatch"); end
    if (expq.size() != 0) void'(expq.pop_front());
  end

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int a = 0; a < NW; a++) begin
      w[a] = longint'($urandom_range(0, 1023)) - 512;
      cfg_we = 1; cfg_addr = cfg_addr_t'(7 + a); cfg_data = data_t'(w[a]);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    begin
      longint t0;
      for (int i = 0; i < D; i++) in_data[i] = data_t'($urandom_range(0, 8191) - 4096);
      expq.push_back(ref_row(in_data));
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      t0 = cycle;
      while (!out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != 1) begin failures++; $display("latency %0d", cycle - t0 + 1); end
      @(posedge clk); #1;
    end
    for (int r = 0; r < 600; r++) begin
      if (!in_valid || took) begin
        in_valid = ($urandom_range(0, 1) != 0);
        for (int i = 0; i < D; i++) in_data[i] = data_t'($urandom_range(0, 8191) - 4096);
        if (in_valid) expq.push_back(ref_row(in_data));
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
