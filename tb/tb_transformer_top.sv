// tb_transformer_top: end-to-end test of the whole transformer (reduced
// size: SEQ = 8, D = 8, 2 blocks, 2 heads of width 4, FF = 8, HID = 8, one
// sigmoid output). tb_transformer_top_full is the same test at full size:
// it instantiates the top without parameter overrides, so it runs the
// paper's gravitational-wave sizes through the top module's defaults.
//
// The testbench writes random weights through the configuration bus, then
// streams NSEQ sequences of random inputs. Each result is compared with a
// floating-point model (input projection, NBLK blocks, average pooling,
// dense + ReLU, dense, sigmoid) within TOL.
//
// Mechanisms, each counted and required to happen at least once:
//   in_stall     the design holds in_ready low while input is offered
//   in_bubble    the source inserts idle cycles (sequences 2 and later)
//   out_stall    the sink holds out_ready low (results 2 and later)
//   kv_reload    attention heads of block 0 re-enter the K/V load phase
//   skip_fill    the attention skip FIFO of block 0 holds >= SEQ rows
//
// Timing checks: latency = cycles from the edge that takes the first row of
// sequence 0 to the edge that takes its result; interval = cycles between the
// results of sequences 0 and 1 (no bubbles or stalls there). Both must equal
// the design's expected values LAT_EXP and II_EXP, which are this design's
// pipeline depths (the paper's latencies come from an HLS design with
// different internals; they are printed for comparison only).
module tb_transformer_top;
  import tf_pkg::*;
  import tb_ref_pkg::*;
  localparam int SEQ = 8, IN_DIM = 2, D = 8, NBLK = 2, H = 2, DK = 4, FF = 8, HID = 8;
  localparam int NSEQ = 4;
  localparam real TOL = 0.06;
  localparam int EMB_W   = dense_words(IN_DIM, D);
  localparam int BLK_W   = block_words(D, H, DK, FF);
  localparam int HEAD_B  = EMB_W + NBLK * BLK_W;
  localparam int NW      = HEAD_B + dense_words(D, HID) + dense_words(HID, 1);
  // first row in to result out: embed 1, per block SEQ + 23, pooling SEQ, head 3;
  // interval: K/V load (SEQ) + attend (SEQ) + head pipeline drain (5)
  localparam int LAT_EXP = 1 + NBLK * (SEQ + 23) + SEQ + 3;
  localparam int II_EXP  = 2 * SEQ + 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_t cfg_addr; data_t cfg_data;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t [IN_DIM-1:0] in_data;
  data_t [0:0] out_data;

  transformer_top #(.SEQ(SEQ), .IN_DIM(IN_DIM), .D(D), .NBLK(NBLK), .HEADS(H), .DK(DK), .FF(FF), .HID(HID)) dut (.*);

  int checks = 0, failures = 0;
  int n_in = 0, n_out = 0, hold = 0;
  int in_stall = 0, in_bubble = 0, out_stall = 0, kv_reload = 0, max_skip = 0;
  longint cycle = 0, t_in0 = -1;
  longint t_out [NSEQ];
  logic gap, loading_q;
  rvec_t w = new[NW];
  data_t [IN_DIM-1:0] xs [NSEQ][SEQ];
  real expect_o [NSEQ];

  initial begin
    repeat (NW + NSEQ * (NBLK + 2) * (2 * SEQ + 40) + 1000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d results", n_out, NSEQ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- source and sink ----------------
  always @(posedge clk) begin
    cycle <= cycle + 1;
    gap   <= (n_in >= 2 * SEQ) && ($urandom_range(0, 3) == 0);
  end
  assign in_valid  = rst_n && !cfg_we && !gap && (n_in < NSEQ * SEQ);
  assign in_data   = xs[(n_in / SEQ) % NSEQ][n_in % SEQ];
  assign out_ready = !(n_out >= 2 && hold < 3);

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (n_in == 0) t_in0 = cycle;
      n_in++;
    end
    if (in_valid && !in_ready) in_stall++;
    if (!cfg_we && !in_valid && n_in < NSEQ * SEQ) in_bubble++;
    if (out_valid && !out_ready) begin out_stall++; hold++; end
    loading_q <= dut.g_blk[0].loading;
    if (dut.g_blk[0].loading && !loading_q && n_in > 0) kv_reload++;
    if (int'(dut.g_blk[0].u_block.u_skip1.count) > max_skip)
      max_skip = int'(dut.g_blk[0].u_block.u_skip1.count);
  end

  // ---------------- result check ----------------
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real got;
    got = real'(out_data[0]) * LSB;
    checks++;
    if (n_out < NSEQ) begin
      t_out[n_out] = cycle;
      if (got - expect_o[n_out] > TOL || expect_o[n_out] - got > TOL) begin
        failures++;
        $display("result %0d: %f expected %f", n_out, got, expect_o[n_out]);
      end
    end else begin
      failures++;
      $display("unexpected result %0d", n_out);
    end
    n_out++;
    hold = 0;
  end

  // ---------------- reference model ----------------
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

  function automatic real model(input rvec_t x);
    rvec_t a, p, h, z;
    a = dense_seq(x, SEQ, IN_DIM, D, w, 0, 1'b0);
    for (int b = 0; b < NBLK; b++) a = block(a, SEQ, D, H, DK, FF, 1'b1, w, EMB_W + b * BLK_W);
    p = new[D];
    for (int d = 0; d < D; d++) begin
      p[d] = 0.0;
      for (int t = 0; t < SEQ; t++) p[d] += a[t * D + d];
      p[d] = p[d] / SEQ;
    end
    h = dense_seq(p, 1, D, HID, w, HEAD_B, 1'b1);
    z = dense_seq(h, 1, HID, 1, w, HEAD_B + dense_words(D, HID), 1'b0);
    return 1.0 / (1.0 + $exp(-z[0]));
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
    fill_dense(HEAD_B + dense_words(D, HID), HID, 1);
    for (int s = 0; s < NSEQ; s++) begin
      for (int t = 0; t < SEQ; t++)
        for (int i = 0; i < IN_DIM; i++) begin
          xs[s][t][i] = data_t'(int'($urandom_range(0, 4095)) - 2048);
        end
    end
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
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
    wait (n_out == NSEQ);
    repeat (20) @(posedge clk);

    $display("latency %0d cycles (expected %0d; paper GW model at R1: 537)",
             t_out[0] - t_in0, LAT_EXP);
    $display("interval %0d cycles (expected %0d; paper GW model at R1: 212)",
             t_out[1] - t_out[0], II_EXP);
    $display("in_stall %0d in_bubble %0d out_stall %0d kv_reload %0d skip peak %0d",
             in_stall, in_bubble, out_stall, kv_reload, max_skip);
    checks += 7;
    if (t_out[0] - t_in0 != LAT_EXP)     begin failures++; $display("latency mismatch"); end
    if (t_out[1] - t_out[0] != II_EXP)   begin failures++; $display("interval mismatch"); end
    if (in_stall == 0)  begin failures++; $display("in_stall never happened"); end
    if (in_bubble == 0) begin failures++; $display("in_bubble never happened"); end
    if (out_stall == 0) begin failures++; $display("out_stall never happened"); end
    if (kv_reload == 0) begin failures++; $display("kv_reload never happened"); end
    if (max_skip < SEQ) begin failures++; $display("skip FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
