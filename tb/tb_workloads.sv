// tb_workloads: the other two model shapes of the paper's model table run
// end to end through the same RTL, side by side, each in a workload_run
// harness (random weights, random inputs, floating-point reference, exact
// latency and interval checks):
//   engine anomaly  SEQ 50, 1 input, 3 blocks, width 16, 2 softmax outputs,
//                   no layer normalisation
//   b-tagging       SEQ 15, 6 inputs, 3 blocks, width 64, 3 softmax outputs
// plus a small gravitational-wave-like shape (SEQ 8, width 8) with reuse
// factor 4 in every dense layer, the trade-off the paper's latency tables
// sweep.
// Head count (2), head width (4), feed-forward and classifier widths (16)
// are not given for these models and are this design's choice. The top's
// defaults are the gravitational-wave model (tb_transformer_top_full).
// A watchdog ends the run if either harness does not finish.
module tb_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c0, f0, c1, f1, c2, f2;
  logic d0, d1, d2;

  workload_run #(.SEQ(50), .IN_DIM(1), .D(16), .NBLK(3), .H(2), .DK(4), .FF(16), .HID(16),
                 .N_OUT(2), .OUT_SOFTMAX(1'b1), .LAYER_NORM(1'b0), .NSEQ(3))
    u_engine (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  workload_run #(.SEQ(15), .IN_DIM(6), .D(64), .NBLK(3), .H(2), .DK(4), .FF(16), .HID(16),
                 .N_OUT(3), .OUT_SOFTMAX(1'b1), .LAYER_NORM(1'b1), .NSEQ(3))
    u_btag (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));
  workload_run #(.SEQ(8), .IN_DIM(2), .D(8), .NBLK(2), .H(2), .DK(4), .FF(8), .HID(8),
                 .N_OUT(1), .OUT_SOFTMAX(1'b0), .LAYER_NORM(1'b1), .REUSE(4), .NSEQ(3))
    u_reuse4 (.clk, .rst_n, .checks(c2), .failures(f2), .done(d2));

  initial begin
    repeat (60000) @(posedge clk);
    $display("watchdog: engine done %0d, b-tagging done %0d, reuse 4 done %0d", d0, d1, d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
