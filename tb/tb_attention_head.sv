// tb_attention_head: one head with SEQ = 6 and DK = 4. Three sequences of
// random Q, K and V rows are fed (K/V on the load port, Q rows offered from
// the start and taken only in the attend phase); outputs are compared with a
// floating-point softmax(Q K^T / sqrt(DK)) V within 0.03. The cycle counts are
// checked: SEQ cycles of loading, first output valid 5 cycles after the first Q
// row is taken, then one row per cycle. Random back-pressure is applied to the
// later sequences.
module tb_attention_head;
  import tf_pkg::*;
  import tb_ref_pkg::*;
  localparam int SEQ = 6, DK = 4, NSEQ = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic kv_valid, kv_ready, q_valid, q_ready, out_valid, out_ready, loading;
  data_t [DK-1:0] k_in, v_in, q_in, out_data;

  attention_head #(.SEQ(SEQ), .DK(DK)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;
  data_t [DK-1:0] qs [NSEQ][SEQ], ks [NSEQ][SEQ], vs [NSEQ][SEQ];
  rvec_t expect_o [NSEQ];
  longint cycle = 0, t_q0 = -1, t_o0 = -1, t_olast = -1;
  int n_out = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int s, t;
    real got, e;
    s = n_out / SEQ; t = n_out % SEQ;
    if (n_out == 0) t_o0 = cycle;
    if (n_out == SEQ - 1) t_olast = cycle;
    for (int d = 0; d < DK; d++) begin
      got = real'(out_data[d]) * LSB;
      e = expect_o[s][t * DK + d];
      checks++;
      if (got - e > 0.03 || e - got > 0.03) begin
        failures++; $display("seq %0d row %0d [%0d]: %f expected %f", s, t, d, got, e);
      end
    end
    n_out++;
  end
  always @(posedge clk) if (rst_n && q_valid && q_ready && t_q0 < 0) t_q0 = cycle;
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;

  // Q feeder: rows of sequence s are offered once its K/V rows start
  int qs_idx = 0;
  always @(posedge clk) if (rst_n && q_valid && q_ready) qs_idx <= qs_idx + 1;
  assign q_valid = rst_n && (qs_idx < NSEQ * SEQ);
  assign q_in    = qs[(qs_idx / SEQ) % NSEQ][qs_idx % SEQ];

  initial begin
    kv_valid = 0; out_ready = 1; k_in = '0; v_in = '0;
    for (int s = 0; s < NSEQ; s++) begin
      rvec_t qm = new[SEQ * DK], km = new[SEQ * DK], vm = new[SEQ * DK];
      for (int t = 0; t < SEQ; t++)
        for (int d = 0; d < DK; d++) begin
          qs[s][t][d] = data_t'($urandom_range(0, 4095) - 2048);
          ks[s][t][d] = data_t'($urandom_range(0, 4095) - 2048);
          vs[s][t][d] = data_t'($urandom_range(0, 4095) - 2048);
          qm[t * DK + d] = real'(qs[s][t][d]) * LSB;
          km[t * DK + d] = real'(ks[s][t][d]) * LSB;
          vm[t * DK + d] = real'(vs[s][t][d]) * LSB;
        end
      expect_o[s] = attend(qm, km, vm, SEQ, DK);
    end
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int s = 0; s < NSEQ; s++) begin
      longint t_load0;
      t_load0 = -1;
      for (int t = 0; t < SEQ; t++) begin
        k_in = ks[s][t]; v_in = vs[s][t]; kv_valid = 1;
        #1;
        while (!kv_ready) begin @(posedge clk); #1; end
        if (t == 0) t_load0 = cycle;
        @(posedge clk); #1;
        if (s > 0) out_ready = ($urandom_range(0, 2) != 0);
      end
      kv_valid = 0;
      checks++;
      if (cycle - t_load0 != SEQ) begin failures++; $display("load took %0d", cycle - t_load0); end
      while (!loading) begin
        @(posedge clk); #1;
        if (s > 0) out_ready = ($urandom_range(0, 2) != 0);
      end
    end
    out_ready = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (n_out != NSEQ * SEQ) begin failures++; $display("%0d outputs", n_out); end
    checks++;
    // output valid 5 cycles after the edge that took Q, handed on at the 6th
    if (t_o0 - t_q0 != 6) begin failures++; $display("first output %0d cycles after first Q", t_o0 - t_q0); end
    checks++;
    if (t_olast - t_o0 != SEQ - 1) begin failures++; $display("first sequence output took %0d", t_olast - t_o0 + 1); end
    checks++;
    if (stalls == 0) begin failures++; $display("no back-pressure exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
