// tb_transformer_block: one transformer block (SEQ = 6, D = 8, 2 heads of
// width 4, feed-forward width 12, layer norm on) with random weights. Three
// sequences stream through back to back with random output back-pressure on
// the later ones; each output row is compared with a floating-point model of
// MHA, residual add, layer norm, feed-forward, residual add, layer norm within
// 0.08. The skip FIFO of the attention residual must fill to at least SEQ rows.
module tb_transformer_block;
  import tf_pkg::*;
  import tb_ref_pkg::*;
  localparam int SEQ = 6, D = 8, H = 2, DK = 4, FF = 12, NSEQ = 3;
  localparam int NW = 3 * H * (D * DK + DK) + (H * DK * D + D) + 4 * D + (D * FF + FF) + (FF * D + D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;
  logic in_valid, in_ready, out_valid, out_ready, loading;
  data_t [D-1:0] in_data, out_data;

  transformer_block #(.SEQ(SEQ), .D(D), .HEADS(H), .DK(DK), .FF(FF), .REUSE(1),
                      .LAYER_NORM(1'b1), .BASE(0)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, n_out = 0, n_in = 0, max_skip = 0;
  rvec_t w = new[NW];
  data_t [D-1:0] xs [NSEQ][SEQ];
  rvec_t expect_o [NSEQ];
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;
  always @(posedge clk) if (rst_n && int'(dut.u_skip1.count) > max_skip) max_skip = int'(dut.u_skip1.count);

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
    for (int d = 0; d < D; d++) begin
      got = real'(out_data[d]) * LSB;
      e = expect_o[s][t * D + d];
      checks++;
      if (got - e > 0.08 || e - got > 0.08) begin
        failures++; $display("seq %0d row %0d [%0d]: %f expected %f", s, t, d, got, e);
      end
    end
    n_out++;
  end

  always @(posedge clk) if (rst_n && in_valid && in_ready) n_in++;
  assign in_valid = rst_n && !cfg_we && (n_in < NSEQ * SEQ);
  assign in_data  = xs[(n_in / SEQ) % NSEQ][n_in % SEQ];

  function automatic void fill_dense(int base, int ni, int no);
    for (int a = 0; a < ni * no + no; a++)
      w[base + a] = real'(int'($urandom_range(0, 2047)) - 1024) * LSB * 1.5 / $sqrt(real'(ni));
  endfunction
  function automatic void fill_ln(int base, int d);
    for (int j = 0; j < d; j++) begin
      w[base + j]     = real'($urandom_range(0, 409) + 819) * LSB;   // gamma in [0.8, 1.2]
      w[base + d + j] = real'(int'($urandom_range(0, 204)) - 102) * LSB;   // beta in [-0.1, 0.1]
    end
  endfunction

  initial begin
    int b;
    cfg_we = 1; cfg_addr = '0; cfg_data = '0; out_ready = 1;
    b = 0;
    for (int m = 0; m < 3 * H; m++) begin fill_dense(b, D, DK); b += D * DK + DK; end
    fill_dense(b, H * DK, D); b += H * DK * D + D;
    fill_ln(b, D); b += 2 * D;
    fill_dense(b, D, FF); b += D * FF + FF;
    fill_dense(b, FF, D); b += FF * D + D;
    fill_ln(b, D); b += 2 * D;
    for (int a = 0; a < NW; a++) w[a] = real'(int'($floor(w[a] * 1024.0))) * LSB;
    for (int s = 0; s < NSEQ; s++) begin
      rvec_t x = new[SEQ * D];
      for (int t = 0; t < SEQ; t++)
        for (int d = 0; d < D; d++) begin
          xs[s][t][d] = data_t'($urandom_range(0, 2047) - 1024);
          x[t * D + d] = real'(xs[s][t][d]) * LSB;
        end
      expect_o[s] = block(x, SEQ, D, H, DK, FF, 1'b1, w, 0);
    end
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int a = 0; a < NW; a++) begin
      cfg_addr = cfg_addr_t'(a); cfg_data = data_t'(int'(w[a] * 1024.0));
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int c = 0; c < 3000 && n_out < NSEQ * SEQ; c++) begin
      @(posedge clk); #1;
      out_ready = (n_out < SEQ) ? 1'b1 : ($urandom_range(0, 2) != 0);
    end
    checks++;
    if (n_out != NSEQ * SEQ) begin failures++; $display("%0d outputs", n_out); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall exercised"); end
    checks++;
    if (max_skip < SEQ) begin failures++; $display("skip FIFO peak %0d", max_skip); end
    $display("skip FIFO peak %0d rows, output stalls %0d", max_skip, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
