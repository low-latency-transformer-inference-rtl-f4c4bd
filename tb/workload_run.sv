// workload_run: test harness that runs one model shape through the whole
// transformer (transformer_top) and reports its own checks and failures, so a
// single testbench can run several model shapes side by side (tb_workloads).
//
// It writes random weights through the configuration bus, streams NSEQ random
// sequences with idle gaps from the third sequence on and output back-pressure
// from the third result on, and compares every result with a floating-point
// model: input projection, NBLK blocks (with or without layer norm), average
// pooling, dense + ReLU, dense, then sigmoid or softmax, within TOL.
// With REUSE = 1 the latency (accept edge of the first row to accept edge of
// the result) and interval (between the first two results) must equal this
// design's values:
//   latency  = 1 + NBLK * (SEQ + 13 + 10 * LAYER_NORM) + SEQ + 2 + (3 or 1)
//   interval = 2 * SEQ + 5
// With REUSE > 1 every dense layer takes REUSE cycles per row (one row every
// REUSE + 1 cycles), so only a longer latency is required; both counts are
// printed.
// Interface: clk and rst_n in; checks, failures and done (all results seen
// and checked) out. The model shapes come from the paper's model table; the
// unlisted widths (heads, feed-forward, classifier) are this design's choice.
module workload_run
  import tf_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int SEQ = 8, parameter int IN_DIM = 2, parameter int D = 8, parameter int NBLK = 2,
  parameter int H = 2, parameter int DK = 4, parameter int FF = 8, parameter int HID = 8,
  parameter int N_OUT = 1, parameter bit OUT_SOFTMAX = 1'b0, parameter bit LAYER_NORM = 1'b1,
  parameter int REUSE = 1, parameter int NSEQ = 3
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam real TOL = 0.06;
  localparam int EMB_W   = dense_words(IN_DIM, D);
  localparam int BLK_W   = block_words(D, H, DK, FF);
  localparam int HEAD_B  = EMB_W + NBLK * BLK_W;
  localparam int NW      = HEAD_B + dense_words(D, HID) + dense_words(HID, N_OUT);
  localparam int LAT_EXP = 1 + NBLK * (SEQ + 13 + (LAYER_NORM ? 10 : 0)) + SEQ + 2 + (OUT_SOFTMAX ? 3 : 1);
  localparam int II_EXP  = 2 * SEQ + 5;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t [IN_DIM-1:0] in_data;
  data_t [N_OUT-1:0] out_data;

  transformer_top #(.SEQ(SEQ), .IN_DIM(IN_DIM), .D(D), .NBLK(NBLK), .HEADS(H), .DK(DK), .FF(FF),
                    .HID(HID), .N_OUT(N_OUT), .OUT_SOFTMAX(OUT_SOFTMAX),
                    .LAYER_NORM(LAYER_NORM), .REUSE(REUSE)) dut (.*);

  int n_in = 0, n_out = 0, hold = 0, in_stall = 0, out_stall = 0;
  longint cycle = 0, t_in0 = -1;
  longint t_out [NSEQ];
  logic gap, started = 0;
  rvec_t w = new[NW];
  data_t [IN_DIM-1:0] xs [NSEQ][SEQ];
  rvec_t expect_o [NSEQ];

  initial begin checks = 0; failures = 0; done = 0; end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    gap   <= (n_in >= 2 * SEQ) && ($urandom_range(0, 3) == 0);
  end
  assign in_valid  = rst_n && started && !gap && (n_in < NSEQ * SEQ);
  assign in_data   = xs[(n_in / SEQ) % NSEQ][n_in % SEQ];
  assign out_ready = !(n_out >= 2 && hold < 3);

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (n_in == 0) t_in0 = cycle;
      n_in++;
    end
    if (in_valid && !in_ready) in_stall++;
    if (out_valid && !out_ready) begin out_stall++; hold++; end
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real got;
    if (n_out < NSEQ) begin
      t_out[n_out] = cycle;
      for (int k = 0; k < N_OUT; k++) begin
        got = real'(out_data[k]) * LSB;
        checks++;
        if (got - expect_o[n_out][k] > TOL || expect_o[n_out][k] - got > TOL) begin
          failures++;
          $display("%m result %0d[%0d]: %f expected %f", n_out, k, got, expect_o[n_out][k]);
        end
      end
    end else begin
      failures++;
      $display("%m unexpected result %0d", n_out);
    end
    n_out++;
    hold = 0;
  end

  function automatic void fill_dense(int base, int ni, int no);
    for (int a = 0; a < ni * no + no; a++)
      w[base + a] = real'(int'($urandom_range(0, 2047)) - 1024) * LSB * 1.5 / $sqrt(real'(ni));
  endfunction
  function automatic void fill_ln(int base, int d);
    for (int j = 0; j < d; j++) begin
      w[base + j]     = real'($urandom_range(0, 409) + 819) * LSB;
      w[base + d + j] = real'(int'($urandom_range(0, 204)) - 102) * LSB;
    end
  endfunction

  function automatic rvec_t model(input rvec_t x);
    rvec_t a, p, h, z, y;
    a = dense_seq(x, SEQ, IN_DIM, D, w, 0, 1'b0);
    for (int b = 0; b < NBLK; b++) a = block(a, SEQ, D, H, DK, FF, LAYER_NORM, w, EMB_W + b * BLK_W);
    p = new[D];
    for (int d = 0; d < D; d++) begin
      p[d] = 0.0;
      for (int t = 0; t < SEQ; t++) p[d] += a[t * D + d];
      p[d] = p[d] / SEQ;
    end
    h = dense_seq(p, 1, D, HID, w, HEAD_B, 1'b1);
    z = dense_seq(h, 1, HID, N_OUT, w, HEAD_B + dense_words(D, HID), 1'b0);
    if (OUT_SOFTMAX) return softmax_vec(z);
    y = new[N_OUT];
    foreach (z[k]) y[k] = 1.0 / (1.0 + $exp(-z[k]));
    return y;
  endfunction

  initial begin
    int b;
    cfg_we = 1; cfg_addr = '0; cfg_data = '0;
    fill_dense(0, IN_DIM, D);
    for (int k = 0; k < NBLK; k++) begin
      b = EMB_W + k * BLK_W;
      for (int m = 0; m < 3 * H; m++) begin fill_dense(b, D, DK); b += dense_words(D, DK); end
      fill_dense(b, H * DK, D); b += dense_words(H * DK, D);
      fill_ln(b, D); b += 2 * D;
      fill_dense(b, D, FF); b += dense_words(D, FF);
      fill_dense(b, FF, D); b += dense_words(FF, D);
      fill_ln(b, D);
    end
    fill_dense(HEAD_B, D, HID);
    fill_dense(HEAD_B + dense_words(D, HID), HID, N_OUT);
    for (int s = 0; s < NSEQ; s++)
      for (int t = 0; t < SEQ; t++)
        for (int i = 0; i < IN_DIM; i++) xs[s][t][i] = data_t'(int'($urandom_range(0, 4095)) - 2048);
    @(posedge clk iff rst_n); #1;
    for (int a = 0; a < NW; a++) begin
      cfg_addr = cfg_addr_t'(a); cfg_data = data_t'(int'($floor(w[a] * 1024.0)));
      w[a] = real'(cfg_data) * LSB;
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int s = 0; s < NSEQ; s++) begin
      rvec_t x = new[SEQ * IN_DIM];
      for (int t = 0; t < SEQ; t++)
        for (int i = 0; i < IN_DIM; i++) x[t * IN_DIM + i] = real'(xs[s][t][i]) * LSB;
      expect_o[s] = model(x);
    end
    started = 1;
    wait (n_out == NSEQ);
    repeat (20) @(posedge clk);
    $display("%m: latency %0d (expected %0d), interval %0d (expected %0d), in_stall %0d, out_stall %0d",
             t_out[0] - t_in0, LAT_EXP, t_out[1] - t_out[0], II_EXP, in_stall, out_stall);
    checks += 2;
    if (REUSE == 1) begin
      checks += 2;
      if (t_out[0] - t_in0 != LAT_EXP)   begin failures++; $display("%m latency mismatch"); end
      if (t_out[1] - t_out[0] != II_EXP) begin failures++; $display("%m interval mismatch"); end
    end else begin
      checks++;
      if (t_out[0] - t_in0 <= LAT_EXP) begin failures++; $display("%m reuse did not lengthen latency"); end
    end
    if (in_stall == 0)  begin failures++; $display("%m input never stalled"); end
    if (out_stall == 0) begin failures++; $display("%m output never stalled"); end
    done = 1;
  end
endmodule
