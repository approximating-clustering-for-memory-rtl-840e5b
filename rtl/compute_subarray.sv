// compute_subarray: one limited-size storage array of the median accelerator,
// with the compute steps of the bit-serial median done inside it.
//
// Each of the ROWS rows holds one WIDTH-bit fixed-point number, a cluster
// label and a valid flag. A median operation never touches the stored number:
// OP_COPY copies every row into a working copy and sets the row's select bit
// when the row is valid and its label equals cluster_sel, so rows of other
// clusters take no part (the paper's per-row inclusion bits). The working copy
// is then consumed by the two steps the paper describes:
//   * vertical step (OP_SENSE_COL): the bit `col` of the selected rows of one
//     segment of SEG_ROWS rows is put on `sense`; rows not selected read 0.
//     The paper senses only a fraction of a column at a time; here a segment
//     is that fraction and `seg` picks it.
//   * horizontal step (OP_PROPAGATE): every selected row whose bit `col`
//     differs from the result bit `maj_bit` (a minority row) overwrites all
//     bits to the right of `col` with that bit. All rows do this in parallel
//     in one cycle.
// OP_SENSE_SEL puts the select bits of one segment on `sense`, so the same
// counters can count the rows taking part.
//
// Host port: wr_en writes a row (data, label, valid <= 1) at the next edge;
// with wr_label_only only the label changes (re-assignment of a point to
// another cluster). clear drops every valid flag. rd_data returns the stored
// number of rd_row one cycle after it is presented.
//
// Timing: `sense` is combinational from registers; all updates take effect at
// the next rising edge. The paper does the propagation with RRAM cells; here
// the array is flip-flops/memory bits and the propagation is row-parallel
// logic, which is this design's choice. Reset clears valid and select bits;
// the number storage is not reset.
module compute_subarray
  import median_pkg::*;
#(
  parameter int unsigned WIDTH    = WIDTH_DEF,
  parameter int unsigned ROWS     = ROWS_DEF,
  parameter int unsigned SEG_ROWS = SEG_ROWS_DEF,
  parameter int unsigned LABEL_W  = LABEL_W_DEF,
  localparam int unsigned ROW_AW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SEGS    = ROWS / SEG_ROWS,
  localparam int unsigned SEG_AW  = (SEGS > 1) ? $clog2(SEGS) : 1,
  localparam int unsigned COL_AW  = (WIDTH > 1) ? $clog2(WIDTH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host port
  input  logic                clear,
  input  logic                wr_en,
  input  logic                wr_label_only,
  input  logic [ROW_AW-1:0]   wr_row,
  input  logic [WIDTH-1:0]    wr_data,
  input  logic [LABEL_W-1:0]  wr_label,
  input  logic [ROW_AW-1:0]   rd_row,
  output logic [WIDTH-1:0]    rd_data,
  // compute port, driven by the controller
  input  array_op_e           op,
  input  logic [LABEL_W-1:0]  cluster_sel,
  input  logic [COL_AW-1:0]   col,
  input  logic [SEG_AW-1:0]   seg,
  input  logic                maj_bit,
  output logic [SEG_ROWS-1:0] sense
);

  initial begin
    assert (ROWS % SEG_ROWS == 0) else $error("ROWS must be a multiple of SEG_ROWS");
  end

  logic [WIDTH-1:0]   data_q [ROWS];
  logic [LABEL_W-1:0] label_q [ROWS];
  logic [ROWS-1:0]    valid_q;
  logic [WIDTH-1:0]   work_q [ROWS];
  logic [ROWS-1:0]    sel_q;

  // stored numbers and labels (memory, no reset)
  always_ff @(posedge clk) begin
    if (wr_en) begin
      label_q[wr_row] <= wr_label;
      if (!wr_label_only) data_q[wr_row] <= wr_data;
    end
    rd_data <= data_q[rd_row];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (clear) begin
      valid_q <= '0;
    end else if (wr_en && !wr_label_only) begin
      valid_q[wr_row] <= 1'b1;
    end
  end

  // bits to the right of the processed column
  logic [WIDTH-1:0] low_mask;
  assign low_mask = (WIDTH'(1) << col) - WIDTH'(1);

  // working copy: copy and in-place propagation
  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      if (op == OP_COPY) begin
        work_q[r] <= data_q[r];
      end else if (op == OP_PROPAGATE && sel_q[r] && (work_q[r][col] != maj_bit)) begin
        work_q[r] <= work_q[r][col] ? (work_q[r] | low_mask) : (work_q[r] & ~low_mask);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q <= '0;
    end else if (op == OP_COPY) begin
      for (int r = 0; r < ROWS; r++) begin
        sel_q[r] <= valid_q[r] && (label_q[r] == cluster_sel);
      end
    end
  end

  // sensing of one segment
  always_comb begin
    sense = '0;
    for (int i = 0; i < SEG_ROWS; i++) begin
      if (op == OP_SENSE_SEL) begin
        sense[i] = sel_q[int'(seg) * SEG_ROWS + i];
      end else if (op == OP_SENSE_COL) begin
        sense[i] = sel_q[int'(seg) * SEG_ROWS + i] && work_q[int'(seg) * SEG_ROWS + i][col];
      end
    end
  end

endmodule
