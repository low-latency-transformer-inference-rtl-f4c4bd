// tb_output_head: two output heads fed the same sequences of 4 rows of
// width 6: one with a single sigmoid output, one with a 3-way softmax. Each
// averages the rows, applies dense 6 -> 5 (ReLU) and dense 5 -> N_OUT and the
// final activation; results are compared with a floating-point model within
// 0.03. Five sequences are streamed back to back.
module tb_output_head;
  import tf_pkg::*;
  import tb_ref_pkg::*;
  localparam int SEQ = 4, D = 6, HID = 5, NSEQ = 5;
  localparam int NW1 = D * HID + HID + HID * 1 + 1;
  localparam int NW3 = D * HID + HID + HID * 3 + 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;
  logic in_valid, rdy1, rdy3, ov1, ov3;
  data_t [D-1:0] in_data;
  data_t [0:0] out1;
  data_t [2:0] out3;

  output_head #(.SEQ(SEQ), .D(D), .HID(HID), .N_OUT(1), .OUT_SOFTMAX(1'b0), .BASE(0)) dut1 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(in_valid && rdy3), .in_ready(rdy1), .in_data,
    .out_valid(ov1), .out_ready(1'b1), .out_data(out1));
  output_head #(.SEQ(SEQ), .D(D), .HID(HID), .N_OUT(3), .OUT_SOFTMAX(1'b1), .BASE(100)) dut3 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid(in_valid && rdy1), .in_ready(rdy3), .in_data,
    .out_valid(ov3), .out_ready(1'b1), .out_data(out3));

  int checks = 0, failures = 0, n1 = 0, n3 = 0, n_in = 0;
  rvec_t w = new[100 + NW3];
  data_t [D-1:0] xs [NSEQ][SEQ];
  rvec_t e1 [NSEQ], e3 [NSEQ];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && ov1) begin
    real got;
    got = real'(out1[0]) * LSB;
    checks++;
    if (got - e1[n1][0] > 0.03 || e1[n1][0] - got > 0.03) begin
      failures++; $display("sigmoid seq %0d: %f expected %f", n1, got, e1[n1][0]);
    end
    n1++;
  end
  always @(posedge clk) if (rst_n && ov3) begin
    real got;
    for (int k = 0; k < 3; k++) begin
      got = real'(out3[k]) * LSB;
      checks++;
      if (got - e3[n3][k] > 0.03 || e3[n3][k] - got > 0.03) begin
        failures++; $display("softmax seq %0d [%0d]: %f expected %f", n3, k, got, e3[n3][k]);
      end
    end
    n3++;
  end

  always @(posedge clk) if (rst_n && in_valid && rdy1 && rdy3) n_in++;
  assign in_valid = rst_n && !cfg_we && (n_in < NSEQ * SEQ);
  assign in_data  = xs[(n_in / SEQ) % NSEQ][n_in % SEQ];

  function automatic rvec_t ref_head(input rvec_t x, input int base, input int n_out, input bit sm);
    rvec_t p = new[D];
    rvec_t h, z, y;
    for (int d = 0; d < D; d++) begin
      p[d] = 0.0;
      for (int t = 0; t < SEQ; t++) p[d] += x[t * D + d];
      p[d] = p[d] / SEQ;
    end
    h = dense_seq(p, 1, D, HID, w, base, 1'b1);
    z = dense_seq(h, 1, HID, n_out, w, base + D * HID + HID, 1'b0);
    if (sm) return softmax_vec(z);
    y = new[n_out];
    foreach (z[k]) y[k] = 1.0 / (1.0 + $exp(-z[k]));
    return y;
  endfunction

  initial begin
    cfg_we = 1; cfg_addr = '0; cfg_data = '0;
    foreach (w[a]) w[a] = real'(int'($urandom_range(0, 2047)) - 1024) * LSB;
    for (int s = 0; s < NSEQ; s++) begin
      rvec_t x = new[SEQ * D];
      for (int t = 0; t < SEQ; t++)
        for (int d = 0; d < D; d++) begin
          xs[s][t][d] = data_t'(int'($urandom_range(0, 4095)) - 2048);
          x[t * D + d] = real'(xs[s][t][d]) * LSB;
        end
      e1[s] = ref_head(x, 0, 1, 1'b0);
      e3[s] = ref_head(x, 100, 3, 1'b1);
    end
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int a = 0; a < 100 + NW3; a++) begin
      if (a < NW1 || a >= 100) begin
        cfg_addr = cfg_addr_t'(a); cfg_data = data_t'(int'(w[a] * 1024.0));
        @(posedge clk); #1;
      end
    end
    cfg_we = 0;
    repeat (NSEQ * SEQ + 30) @(posedge clk);
    checks++;
    if (n1 != NSEQ || n3 != NSEQ) begin failures++; $display("outputs %0d %0d", n1, n3); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
