// median_ctrl: sequencer of one bit-serial median (rank) operation.
//
// The paper's algorithm walks the bits from the most significant one down. For
// each bit it makes a vertical step, a majority vote over the bit of every
// number taking part, and a horizontal step, in which every number whose bit
// lost the vote (a minority number) copies that bit into all bits to its
// right. The winning bits, MSB first, form the result. This controller runs
// that loop over all subarrays at once:
//   COPY      one cycle: subarrays copy their numbers into the working copy and
//             select the rows of the requested cluster.
//   CNT_ISSUE SEGS cycles: the select bits of segment 0..SEGS-1 are sensed,
//   CNT_WAIT  until all SEGS totals have come back through the counters and
//             the tree; their sum is n, the number of rows taking part. With
//             n = 0 the operation ends at once with `empty` set.
//   VOTE_ISSUE SEGS cycles: bit `col` of segment 0..SEGS-1 is sensed,
//   VOTE_WAIT until the SEGS totals are summed; the majority unit turns the
//             sum into the result bit, stored at result[col].
//   PROP      one cycle: the subarrays propagate the minority bits; then the
//             next lower column, or DONE after column 0.
//   DONE      one cycle: done = 1, result valid until the next start.
// The counter and the tree are pipelined, so the SEGS segments of a step
// follow each other one per cycle. Totals returned by the tree (tot_valid,
// total) are accumulated in every state.
//
// Timing: done rises (WIDTH + 1) * (SEGS + LAT + 3) clock edges after the edge
// that accepts start (SEGS + LAT + 3 for an empty cluster), LAT being the
// latency of the reduction tree: one counting pass plus WIDTH bit rounds of
// SEGS + LAT + 3 cycles each.
// The step order follows the paper; the segmenting, the separate counting pass
// and the cycle schedule are this design's choices.
module median_ctrl
  import median_pkg::*;
#(
  parameter int unsigned WIDTH   = WIDTH_DEF,
  parameter int unsigned SEGS    = ROWS_DEF / SEG_ROWS_DEF,
  parameter int unsigned LABEL_W = LABEL_W_DEF,
  parameter int unsigned TOT_W   = 9,   // width of a total from the tree
  parameter int unsigned ACC_W   = 11,  // width of a count over all rows
  localparam int unsigned COL_AW = (WIDTH > 1) ? $clog2(WIDTH) : 1,
  localparam int unsigned SEG_AW = (SEGS > 1) ? $clog2(SEGS) : 1,
  localparam int unsigned RCV_W  = $clog2(SEGS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               start,
  input  logic [LABEL_W-1:0] start_cluster,
  input  logic [ACC_W-1:0]   start_rank,    // 0: median
  output logic               busy,
  output logic               done,
  output logic               empty,
  output logic [WIDTH-1:0]   result,
  output logic [ACC_W-1:0]   n_sel,
  // last decision, for observation
  output logic               vote_valid,
  output logic [ACC_W-1:0]   vote_ones,
  output logic               vote_bit,
  // to the subarrays
  output array_op_e          op,
  output logic [LABEL_W-1:0] cluster_sel,
  output logic [COL_AW-1:0]  col,
  output logic [SEG_AW-1:0]  seg,
  output logic               maj_bit,
  // from the reduction tree
  input  logic               tot_valid,
  input  logic [TOT_W-1:0]   total
);

  typedef enum logic [2:0] {
    S_IDLE, S_COPY, S_CNT_ISSUE, S_CNT_WAIT, S_VOTE_ISSUE, S_VOTE_WAIT, S_PROP, S_DONE
  } state_e;

  state_e             state_q;
  logic [COL_AW-1:0]  col_q;
  logic [SEG_AW-1:0]  seg_q;
  logic [ACC_W-1:0]   acc_q;
  logic [RCV_W-1:0]   rcv_q;
  logic [ACC_W-1:0]   n_q;
  logic [ACC_W-1:0]   rank_q;
  logic [LABEL_W-1:0] cl_q;
  logic [WIDTH-1:0]   result_q;
  logic               bit_q;
  logic               empty_q;

  logic               all_back;
  logic               acc_clr;
  logic               dec_bit;
  logic [ACC_W-1:0]   rank_used;

  assign all_back = (rcv_q == RCV_W'(SEGS));
  assign acc_clr  = (state_q == S_COPY) || (state_q == S_PROP) ||
                    (state_q == S_CNT_WAIT && all_back);

  majority_unit #(.CNT_W(ACC_W)) u_majority (
    .n        (n_q),
    .ones     (acc_q),
    .rank     (rank_q),
    .rank_used(rank_used),
    .bit_out  (dec_bit)
  );

  // accumulation of the totals of one step
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
      rcv_q <= '0;
    end else if (acc_clr) begin
      acc_q <= '0;
      rcv_q <= '0;
    end else if (tot_valid) begin
      acc_q <= acc_q + ACC_W'(total);
      rcv_q <= rcv_q + RCV_W'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      col_q      <= '0;
      seg_q      <= '0;
      n_q        <= '0;
      rank_q     <= '0;
      cl_q       <= '0;
      result_q   <= '0;
      bit_q      <= 1'b0;
      empty_q    <= 1'b0;
      vote_valid <= 1'b0;
      vote_ones  <= '0;
      vote_bit   <= 1'b0;
    end else begin
      vote_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (start) begin
            cl_q     <= start_cluster;
            rank_q   <= start_rank;
            result_q <= '0;
            empty_q  <= 1'b0;
            state_q  <= S_COPY;
          end
        end
        S_COPY: begin
          seg_q   <= '0;
          state_q <= S_CNT_ISSUE;
        end
        S_CNT_ISSUE: begin
          if (seg_q == SEG_AW'(SEGS - 1)) state_q <= S_CNT_WAIT;
          else                            seg_q   <= seg_q + SEG_AW'(1);
        end
        S_CNT_WAIT: begin
          if (all_back) begin
            n_q   <= acc_q;
            seg_q <= '0;
            col_q <= COL_AW'(WIDTH - 1);
            if (acc_q == '0) begin
              empty_q <= 1'b1;
              state_q <= S_DONE;
            end else begin
              state_q <= S_VOTE_ISSUE;
            end
          end
        end
        S_VOTE_ISSUE: begin
          if (seg_q == SEG_AW'(SEGS - 1)) state_q <= S_VOTE_WAIT;
          else                            seg_q   <= seg_q + SEG_AW'(1);
        end
        S_VOTE_WAIT: begin
          if (all_back) begin
            bit_q           <= dec_bit;
            result_q[col_q] <= dec_bit;
            vote_valid      <= 1'b1;
            vote_ones       <= acc_q;
            vote_bit        <= dec_bit;
            state_q         <= S_PROP;
          end
        end
        S_PROP: begin
          seg_q <= '0;
          if (col_q == '0) begin
            state_q <= S_DONE;
          end else begin
            col_q   <= col_q - COL_AW'(1);
            state_q <= S_VOTE_ISSUE;
          end
        end
        S_DONE: begin
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (state_q)
      S_COPY:       op = OP_COPY;
      S_CNT_ISSUE:  op = OP_SENSE_SEL;
      S_VOTE_ISSUE: op = OP_SENSE_COL;
      S_PROP:       op = OP_PROPAGATE;
      default:      op = OP_IDLE;
    endcase
  end

  assign busy        = (state_q != S_IDLE);
  assign done        = (state_q == S_DONE);
  assign empty       = empty_q;
  assign result      = result_q;
  assign n_sel       = n_q;
  assign cluster_sel = cl_q;
  assign col         = col_q;
  assign seg         = seg_q;
  assign maj_bit     = bit_q;

  // Totals only come back after a sensing step was issued.
  a_no_stray_total: assert property (@(posedge clk) disable iff (!rst_n)
    tot_valid |-> (state_q inside {S_CNT_ISSUE, S_CNT_WAIT, S_VOTE_ISSUE, S_VOTE_WAIT}));
  // At most SEGS totals per step.
  a_rcv_bound: assert property (@(posedge clk) disable iff (!rst_n)
    rcv_q <= RCV_W'(SEGS));

endmodule
