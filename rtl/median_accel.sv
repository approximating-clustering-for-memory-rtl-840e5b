// median_accel: in-memory bit-serial median accelerator for k-medians style
// clustering.
//
// The data points (one fixed-point number per row; one dimension at a time)
// live in ARRAYS subarrays of ROWS rows each. Each row also carries the label
// of the cluster it is assigned to. A command computes, inside the arrays,
// the median (or any requested rank) of the numbers of one cluster, without
// reading the numbers out: every subarray senses one bit column of its
// selected rows, a bit counter per subarray counts the ones, a reduction tree
// merges the partial counts of all subarrays, the controller's majority unit
// decides the result bit, and the subarrays propagate the minority bits. One
// such round is made per bit, from the MSB down.
//
// Host port (all synchronous to clk):
//   clear                    drop all points.
//   wr_en, wr_addr, wr_data  write point wr_addr (row = wr_addr % ROWS of
//                            subarray wr_addr / ROWS) with label wr_label.
//                            With wr_float, wr_data is an IEEE double that is
//                            converted to the fixed-point format on the way
//                            in (fp_sat flags a saturated conversion);
//                            otherwise wr_data[WIDTH-1:0] is stored as is.
//                            With wr_label_only only the label is rewritten
//                            (re-assignment of a point).
//   rd_addr -> rd_data       stored word, two cycles later.
//   start, start_cluster, start_rank
//                            compute the rank-th smallest number of the
//                            cluster (rank 0: the lower median, ceil(n/2)).
//                            busy while running; done pulses for one cycle,
//                            then result, empty (no point in the cluster) and
//                            n_sel (points in the cluster) hold.
//   vote_valid/ones/bit      the count and decision of every bit round.
// Numbers are compared as unsigned words; words written through the float
// path are in offset-binary form, so signed order is kept.
//
// Timing: done rises (WIDTH + 1) * (ROWS/SEG_ROWS + LAT + 3) clock edges after
// the edge that accepts start, LAT = ceil(log2(ARRAYS)) being the tree
// latency (715 cycles at the default sizes). Writes may be made
// while busy: they change the stored numbers, not the running operation.
// The flow follows the paper; array sizes and the cycle schedule are this
// design's choices.
module median_accel
  import median_pkg::*;
#(
  parameter int unsigned WIDTH    = WIDTH_DEF,
  parameter int unsigned ROWS     = ROWS_DEF,
  parameter int unsigned SEG_ROWS = SEG_ROWS_DEF,
  parameter int unsigned ARRAYS   = ARRAYS_DEF,
  parameter int unsigned LABEL_W  = LABEL_W_DEF,
  parameter int unsigned FRAC     = FRAC_DEF,
  localparam int unsigned POINTS  = ROWS * ARRAYS,
  localparam int unsigned ADDR_W  = (POINTS > 1) ? $clog2(POINTS) : 1,
  localparam int unsigned ACC_W   = $clog2(POINTS + 1),
  localparam int unsigned DIN_W   = (WIDTH > 64) ? WIDTH : 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // host load / read port
  input  logic               clear,
  input  logic               wr_en,
  input  logic               wr_label_only,
  input  logic               wr_float,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  logic [DIN_W-1:0]   wr_data,
  input  logic [LABEL_W-1:0] wr_label,
  output logic               fp_sat,
  input  logic [ADDR_W-1:0]  rd_addr,
  output logic [WIDTH-1:0]   rd_data,
  // command
  input  logic               start,
  input  logic [LABEL_W-1:0] start_cluster,
  input  logic [ACC_W-1:0]   start_rank,
  output logic               busy,
  output logic               done,
  output logic               empty,
  output logic [WIDTH-1:0]   result,
  output logic [ACC_W-1:0]   n_sel,
  // per-bit decisions
  output logic               vote_valid,
  output logic [ACC_W-1:0]   vote_ones,
  output logic               vote_bit
);

  localparam int unsigned SEGS   = ROWS / SEG_ROWS;
  localparam int unsigned ROW_AW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned SEG_AW = (SEGS > 1) ? $clog2(SEGS) : 1;
  localparam int unsigned COL_AW = (WIDTH > 1) ? $clog2(WIDTH) : 1;
  localparam int unsigned CW     = $clog2(SEG_ROWS + 1);
  localparam int unsigned LEVELS = (ARRAYS > 1) ? $clog2(ARRAYS) : 0;
  localparam int unsigned TOT_W  = CW + LEVELS;

  // ---- load path -----------------------------------------------------------
  logic [WIDTH-1:0] fp_word;
  logic [WIDTH-1:0] wr_word;

  fp_to_fixed #(.WIDTH(WIDTH), .FRAC(FRAC)) u_fp_to_fixed (
    .fp   (wr_data[63:0]),
    .fixed(fp_word),
    .sat  (fp_sat)
  );

  assign wr_word = wr_float ? fp_word : wr_data[WIDTH-1:0];

  logic [ROW_AW-1:0] wr_row, rd_row;
  int unsigned       wr_arr, rd_arr;
  localparam int unsigned ARR_AW = (ARRAYS > 1) ? $clog2(ARRAYS) : 1;
  logic [ARR_AW-1:0] rd_arr_q;

  assign wr_row = ROW_AW'(int'(wr_addr) % int'(ROWS));
  assign rd_row = ROW_AW'(int'(rd_addr) % int'(ROWS));
  assign wr_arr = int'(wr_addr) / int'(ROWS);
  assign rd_arr = int'(rd_addr) / int'(ROWS);

  // ---- controller ----------------------------------------------------------
  array_op_e          op;
  logic [LABEL_W-1:0] cluster_sel;
  logic [COL_AW-1:0]  col;
  logic [SEG_AW-1:0]  seg;
  logic               maj_bit;
  logic               tot_valid;
  logic [TOT_W-1:0]   total;

  median_ctrl #(
    .WIDTH  (WIDTH),
    .SEGS   (SEGS),
    .LABEL_W(LABEL_W),
    .TOT_W  (TOT_W),
    .ACC_W  (ACC_W)
  ) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .start_cluster(start_cluster),
    .start_rank   (start_rank),
    .busy         (busy),
    .done         (done),
    .empty        (empty),
    .result       (result),
    .n_sel        (n_sel),
    .vote_valid   (vote_valid),
    .vote_ones    (vote_ones),
    .vote_bit     (vote_bit),
    .op           (op),
    .cluster_sel  (cluster_sel),
    .col          (col),
    .seg          (seg),
    .maj_bit      (maj_bit),
    .tot_valid    (tot_valid),
    .total        (total)
  );

  // ---- subarrays and their bit counters ------------------------------------
  logic [WIDTH-1:0] arr_rd   [ARRAYS];
  logic [CW-1:0]    partial  [ARRAYS];
  logic [ARRAYS-1:0] cnt_valid;
  logic             sense_valid;

  assign sense_valid = (op == OP_SENSE_SEL) || (op == OP_SENSE_COL);

  for (genvar a = 0; a < ARRAYS; a++) begin : g_array
    logic [SEG_ROWS-1:0] sense;

    compute_subarray #(
      .WIDTH   (WIDTH),
      .ROWS    (ROWS),
      .SEG_ROWS(SEG_ROWS),
      .LABEL_W (LABEL_W)
    ) u_subarray (
      .clk          (clk),
      .rst_n        (rst_n),
      .clear        (clear),
      .wr_en        (wr_en && (wr_arr == a)),
      .wr_label_only(wr_label_only),
      .wr_row       (wr_row),
      .wr_data      (wr_word),
      .wr_label     (wr_label),
      .rd_row       (rd_row),
      .rd_data      (arr_rd[a]),
      .op           (op),
      .cluster_sel  (cluster_sel),
      .col          (col),
      .seg          (seg),
      .maj_bit      (maj_bit),
      .sense        (sense)
    );

    bit_counter #(.N(SEG_ROWS)) u_counter (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (sense_valid),
      .bits     (sense),
      .out_valid(cnt_valid[a]),
      .count    (partial[a])
    );
  end

  // ---- reduction tree --------------------------------------------------------
  reduction_tree #(.N_IN(ARRAYS), .IN_W(CW)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (cnt_valid[0]),
    .counts   (partial),
    .out_valid(tot_valid),
    .total    (total)
  );

  // ---- read-back -------------------------------------------------------------
  always_ff @(posedge clk) begin
    rd_arr_q <= ARR_AW'(rd_arr);
    rd_data  <= arr_rd[rd_arr_q];
  end

  // All counters sense in the same cycle.
  a_counters_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (cnt_valid == '0) || (cnt_valid == '1));

endmodule
