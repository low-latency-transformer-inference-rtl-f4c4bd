// attention_head: stages 2 and 3 of one attention head,
// O = softmax(Q K^T / sqrt(DK)) V, for a sequence of SEQ rows.
//
// Load phase. The K and V rows of a whole sequence arrive on the kv port, one
// row per cycle, and are written into two register matrices K[SEQ][DK] and
// V[SEQ][DK]. Writing V row by row into a matrix that is read column-wise
// later is the "matrix reshape" of V; both matrices are fully partitioned so
// every element can be read in the same cycle. Q rows produced meanwhile wait
// in an external FIFO (the Q FIFO of the multi-head layer).
//
// Attend phase. Once all SEQ K/V rows are in, one Q row is taken per cycle:
//   score stage  s[j] = (q . K[j]) * (1/sqrt(DK)), all SEQ dot products in
//                parallel, registered;
//   softmax      3-stage softmax over the SEQ scores (softmax);
//   score FIFO   the probability rows are buffered in a row_fifo;
//   AV stage     o[d] = sum_j p[j] * V[j][d], all DK sums in parallel,
//                registered as the output row.
// When the last probability row of the sequence has entered the AV stage the
// head returns to the load phase, so the next sequence's K/V can be written.
//
// Timing: the load phase takes SEQ cycles; in the attend phase the first
// output is valid 5 cycles after the clock edge that took the first Q row
// (score register, three softmax stages, score FIFO, AV register: six
// registers, the first loaded by that edge) and then one row per cycle. The load and attend phases of
// consecutive sequences do not overlap. All ports use valid/ready.
//
// The division of work into stages, the parallel K/V registers, the score
// FIFO and the 1/sqrt(DK) constant follow the paper; the phase control, the
// FIFO depth and the fixed-point formats are this design's choices. The
// scale constant is 1/sqrt(DK) with SCALE_F fractional bits.
module attention_head
  import tf_pkg::*;
#(
  parameter int SEQ = 100,
  parameter int DK  = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  // K/V rows of the sequence (load phase)
  input  logic            kv_valid,
  output logic            kv_ready,
  input  data_t [DK-1:0]  k_in,
  input  data_t [DK-1:0]  v_in,
  // Q rows (attend phase)
  input  logic            q_valid,
  output logic            q_ready,
  input  data_t [DK-1:0]  q_in,
  // output rows
  output logic            out_valid,
  input  logic            out_ready,
  output data_t [DK-1:0]  out_data,
  // status: high while in the load phase
  output logic            loading
);
  localparam int SCALE_F = 16;
  localparam longint SCALE = isqrt((longint'(1) <<< (2 * SCALE_F)) / longint'(DK));
  localparam int CW  = $clog2(SEQ + 1);
  localparam int DW  = 2 * DATA_W + $clog2(DK + 1) + 1;        // dot product width
  localparam int AW  = 2 * DATA_W + $clog2(SEQ + 1) + 1;       // AV sum width

  typedef enum logic {LOAD, ATTEND} phase_e;
  phase_e phase;

  data_t k_mat [SEQ][DK];
  data_t v_mat [SEQ][DK];

  logic [CW-1:0] kv_cnt, q_cnt, av_cnt;

  // ---------------- load phase ----------------
  assign loading  = (phase == LOAD);
  assign kv_ready = (phase == LOAD);

  always_ff @(posedge clk) begin
    if (kv_valid && kv_ready) begin
      for (int d = 0; d < DK; d++) begin
        k_mat[kv_cnt][d] <= k_in[d];
        v_mat[kv_cnt][d] <= v_in[d];
      end
    end
  end

  // ---------------- score stage ----------------
  logic           s_valid, s_ready;
  data_t [SEQ-1:0] s_data;
  data_t [SEQ-1:0] s_next;

  always_comb begin
    for (int j = 0; j < SEQ; j++) begin
      logic signed [DW-1:0] dot;
      longint scaled;
      dot = '0;
      for (int d = 0; d < DK; d++)
        dot += DW'(k_mat[j][d]) * DW'(q_in[d]);
      scaled = (longint'(dot) * SCALE) >>> (DATA_F + SCALE_F);
      s_next[j] = sat_data(scaled);
    end
  end

  assign q_ready = (phase == ATTEND) && (q_cnt != CW'(SEQ)) && (!s_valid || s_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) s_valid <= 1'b0;
    else if (!s_valid || s_ready) s_valid <= q_valid && q_ready;
  end

  always_ff @(posedge clk) begin
    if (q_valid && q_ready) s_data <= s_next;
  end

  // ---------------- softmax and score FIFO ----------------
  logic            p_valid, p_ready;
  data_t [SEQ-1:0] p_data;
  logic            f_valid, f_ready;
  data_t [SEQ-1:0] f_data;

  softmax #(.K(SEQ)) u_softmax (
    .clk, .rst_n,
    .in_valid (s_valid), .in_ready (s_ready), .in_data (s_data),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data)
  );

  row_fifo #(.LANES(SEQ), .DEPTH(2)) u_score_fifo (
    .clk, .rst_n,
    .in_valid (p_valid), .in_ready (p_ready), .in_data (p_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .count    ()
  );

  // ---------------- AV stage ----------------
  data_t [DK-1:0] o_next;

  always_comb begin
    for (int d = 0; d < DK; d++) begin
      logic signed [AW-1:0] acc;
      acc = '0;
      for (int j = 0; j < SEQ; j++)
        acc += AW'(f_data[j]) * AW'(v_mat[j][d]);
      o_next[d] = sat_data(longint'(acc) >>> DATA_F);
    end
  end

  assign f_ready = (phase == ATTEND) && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (!out_valid || out_ready) out_valid <= f_valid && f_ready;
  end

  always_ff @(posedge clk) begin
    if (f_valid && f_ready) out_data <= o_next;
  end

  // ---------------- phase control ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase  <= LOAD;
      kv_cnt <= '0;
      q_cnt  <= '0;
      av_cnt <= '0;
    end else begin
      case (phase)
        LOAD: if (kv_valid && kv_ready) begin
          if (kv_cnt == CW'(SEQ - 1)) begin
            kv_cnt <= '0;
            phase  <= ATTEND;
          end else begin
            kv_cnt <= kv_cnt + 1'b1;
          end
        end
        ATTEND: begin
          if (q_valid && q_ready) q_cnt <= q_cnt + 1'b1;
          if (f_valid && f_ready) begin
            if (av_cnt == CW'(SEQ - 1)) begin
              av_cnt <= '0;
              q_cnt  <= '0;
              phase  <= LOAD;
            end else begin
              av_cnt <= av_cnt + 1'b1;
            end
          end
        end
        default: phase <= LOAD;
      endcase
    end
  end

  // the score FIFO never holds rows from a later sequence than the V matrix
  assert property (@(posedge clk) disable iff (!rst_n)
                   (f_valid && f_ready) |-> (phase == ATTEND));
endmodule
