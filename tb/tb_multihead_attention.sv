// tb_multihead_attention: the multi-head attention layer with SEQ = 5,
// D = 6, 2 heads of width 3, random weights loaded through the configuration
// bus. Three sequences are streamed in back to back, with random output
// back-pressure on the later ones; every output row is compared with a
// floating-point model (projections, scaled dot-product softmax attention per
// head, concatenation, output projection) within 0.05. Checked cycle counts:
// the first output row is valid SEQ + 8 cycles after the first input
// row is taken, and a sequence's rows then leave one per cycle.
module tb_multihead_attention;
  import tf_pkg::*;
  import tb_ref_pkg::*;
  localparam int SEQ = 5, D = 6, H = 2, DK = 3, NSEQ = 3;
  localparam int NW = 3 * H * (D * DK + DK) + (H * DK * D + D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;
  logic in_valid, in_ready, out_valid, out_ready, loading;
  data_t [D-1:0] in_data, out_data;

  multihead_attention #(.SEQ(SEQ), .D(D), .HEADS(H), .DK(DK), .REUSE(1), .BASE(3)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, n_out = 0, n_in = 0, in_stalls = 0;
  rvec_t w = new[3 + NW];
  data_t [D-1:0] xs [NSEQ][SEQ];
  rvec_t expect_o [NSEQ];
  longint cycle = 0, t_i0 = -1, t_o0 = -1, t_o4 = -1;
  always @(posedge clk) cycle++;
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;
  always @(posedge clk) if (rst_n && in_valid && !in_ready) in_stalls++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s, t;
    real got, e;
    s = n_out / SEQ; t = n_out % SEQ;
    if (n_out == 0) t_o0 = cycle;
    if (n_out == SEQ - 1) t_o4 = cycle;
    for (int d = 0; d < D; d++) begin
      got = real'(out_data[d]) * LSB;
      e = expect_o[s][t * D + d];
      checks++;
      if (got - e > 0.05 || e - got > 0.05) begin
        failures++; $display("seq %0d row %0d [%0d]: %f expected %f", s, t, d, got, e);
      end
    end
    n_out++;
  end

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    if (n_in == 0) t_i0 = cycle;
    n_in++;
  end
  assign in_valid = rst_n && !cfg_we && (n_in < NSEQ * SEQ);
  assign in_data  = xs[(n_in / SEQ) % NSEQ][n_in % SEQ];

  initial begin
    cfg_we = 1; cfg_addr = '0; cfg_data = '0; out_ready = 1;
    for (int a = 0; a < NW; a++) begin
      int v;
      v = $urandom_range(0, 1023) - 512;
      w[3 + a] = real'(v) * LSB;
    end
    for (int s = 0; s < NSEQ; s++) begin
      rvec_t x = new[SEQ * D];
      for (int t = 0; t < SEQ; t++)
        for (int d = 0; d < D; d++) begin
          xs[s][t][d] = data_t'($urandom_range(0, 2047) - 1024);
          x[t * D + d] = real'(xs[s][t][d]) * LSB;
        end
      expect_o[s] = mha(x, SEQ, D, H, DK, w, 3);
    end
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int a = 0; a < NW; a++) begin
      cfg_addr = cfg_addr_t'(3 + a); cfg_data = data_t'(int'(w[3 + a] * 1024.0));
      @(posedge clk); #1;
    end
    cfg_we = 0;
    while (n_out < NSEQ * SEQ && cycle < 2000) begin
      @(posedge clk); #1;
      out_ready = (n_out < SEQ) ? 1'b1 : ($urandom_range(0, 2) != 0);
    end
    checks++;
    if (n_out != NSEQ * SEQ) begin failures++; $display("%0d outputs", n_out); end
    checks++;
    // valid SEQ + 8 cycles after the edge that took the first row, handed on
    // at the next edge
    if (t_o0 - t_i0 != SEQ + 9) begin failures++; $display("first output after %0d cycles", t_o0 - t_i0); end
    checks++;
    if (t_o4 - t_o0 != SEQ - 1) begin failures++; $display("first sequence took %0d", t_o4 - t_o0 + 1); end
    checks++;
    if (stalls == 0 || in_stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("output stalls %0d, input stalls %0d", stalls, in_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
