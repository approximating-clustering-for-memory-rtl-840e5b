// tb_compute_subarray: an 8-row, 8-bit subarray with 4-row segments and
// 2-bit labels. The testbench keeps its own copy of what the array should
// hold. It checks
//   * writes, label-only rewrites, clear and the registered read-back;
//   * OP_COPY selecting exactly the valid rows of the requested cluster;
//   * OP_SENSE_SEL / OP_SENSE_COL outputs for every segment and column;
//   * OP_PROPAGATE against a row-by-row model of the minority rule;
//   * a whole bit-serial median made through the array's ports, compared
//     with the lower median of the cluster's numbers found by sorting.
module tb_compute_subarray;
  import median_pkg::*;
  localparam int W = 8, R = 8, S = 4, L = 2, SEGS = R / S;

  logic clk = 0, rst_n = 0;
  logic clear, wr_en, wr_label_only;
  logic [2:0] wr_row, rd_row;
  logic [W-1:0] wr_data, rd_data;
  logic [L-1:0] wr_label, cluster_sel;
  array_op_e op;
  logic [2:0] col;
  logic [0:0] seg;
  logic maj_bit;
  logic [S-1:0] sense;
  int checks = 0, failures = 0;

  compute_subarray #(.WIDTH(W), .ROWS(R), .SEG_ROWS(S), .LABEL_W(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  logic [W-1:0] m_data [R];
  logic [L-1:0] m_label [R];
  logic         m_valid [R];
  logic [W-1:0] m_work [R];
  logic         m_sel [R];

  task automatic idle();
    wr_en = 0; wr_label_only = 0; clear = 0; op = OP_IDLE;
  endtask

  task automatic write_row(int r, logic [W-1:0] d, logic [L-1:0] lb, bit label_only);
    @(negedge clk);
    wr_en = 1; wr_label_only = label_only; wr_row = 3'(r); wr_data = d; wr_label = lb;
    @(negedge clk);
    idle();
    m_label[r] = lb;
    if (!label_only) begin m_data[r] = d; m_valid[r] = 1; end
  endtask

  task automatic do_op(array_op_e o, logic [2:0] c, bit mb);
    @(negedge clk);
    op = o; col = c; maj_bit = mb;
    @(negedge clk);
    idle();
  endtask

  task automatic copy(logic [L-1:0] cl);
    cluster_sel = cl;
    do_op(OP_COPY, 0, 0);
    for (int r = 0; r < R; r++) begin
      m_work[r] = m_data[r];
      m_sel[r]  = m_valid[r] && (m_label[r] == cl);
    end
  endtask

  task automatic propagate(int c, bit mb);
    do_op(OP_PROPAGATE, 3'(c), mb);
    for (int r = 0; r < R; r++)
      if (m_sel[r] && m_work[r][c] != mb)
        for (int k = 0; k < c; k++) m_work[r][k] = m_work[r][c];
  endtask

  // senses one segment and returns the bits
  task automatic sense_seg(array_op_e o, int c, int s, output logic [S-1:0] v);
    @(negedge clk);
    op = o; col = 3'(c); seg = 1'(s);
    #1 v = sense;
    @(negedge clk);
    idle();
  endtask

  task automatic check_all_senses();
    logic [S-1:0] v, e;
    for (int s = 0; s < SEGS; s++) begin
      sense_seg(OP_SENSE_SEL, 0, s, v);
      for (int i = 0; i < S; i++) e[i] = m_sel[s*S+i];
      checks++;
      if (v != e) begin failures++; $display("select sense seg %0d: %b expected %b", s, v, e); end
      for (int c = 0; c < W; c++) begin
        sense_seg(OP_SENSE_COL, c, s, v);
        for (int i = 0; i < S; i++) e[i] = m_sel[s*S+i] && m_work[s*S+i][c];
        checks++;
        if (v != e) begin failures++; $display("col %0d seg %0d: %b expected %b", c, s, v, e); end
      end
    end
  endtask

  // median of the selected rows through the array ports only
  task automatic array_median(logic [L-1:0] cl, output logic [W-1:0] res, output int n);
    logic [S-1:0] v;
    int ones;
    copy(cl);
    n = 0;
    for (int s = 0; s < SEGS; s++) begin
      sense_seg(OP_SENSE_SEL, 0, s, v);
      n += $countones(v);
    end
    res = '0;
    for (int c = W - 1; c >= 0; c--) begin
      ones = 0;
      for (int s = 0; s < SEGS; s++) begin
        sense_seg(OP_SENSE_COL, c, s, v);
        ones += $countones(v);
      end
      res[c] = !(2 * (n - ones) >= n);
      propagate(c, res[c]);
    end
  endtask

  initial begin
    logic [W-1:0] vals [$];
    logic [W-1:0] res;
    int n;
    idle(); wr_row = 0; rd_row = 0; wr_data = 0; wr_label = 0;
    cluster_sel = 0; col = 0; seg = 0; maj_bit = 0;
    for (int r = 0; r < R; r++) begin m_valid[r] = 0; m_sel[r] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int round = 0; round < 40; round++) begin
      // fresh contents: clear, then write a random subset of rows
      @(negedge clk); clear = 1; @(negedge clk); idle();
      for (int r = 0; r < R; r++) m_valid[r] = 0;
      for (int r = 0; r < R; r++)
        if ($urandom_range(0, 7) != 0) write_row(r, W'($urandom), L'($urandom), 0);
      // a few label-only rewrites
      for (int k = 0; k < 2; k++) write_row($urandom_range(0, R - 1), W'($urandom), L'($urandom), 1);
      // read back every valid row
      for (int r = 0; r < R; r++) begin
        if (!m_valid[r]) continue;
        @(negedge clk); rd_row = 3'(r); @(negedge clk);
        checks++;
        if (rd_data != m_data[r]) begin failures++; $display("read row %0d: %h expected %h", r, rd_data, m_data[r]); end
      end
      // copy, sensing, one random propagation, sensing again
      copy(L'($urandom));
      check_all_senses();
      propagate($urandom_range(0, W - 1), 1'($urandom));
      check_all_senses();
      // a whole median through the array, for every cluster
      for (int cl = 0; cl < (1 << L); cl++) begin
        array_median(L'(cl), res, n);
        vals.delete();
        for (int r = 0; r < R; r++) if (m_valid[r] && m_label[r] == L'(cl)) vals.push_back(m_data[r]);
        vals.sort();
        checks++;
        if (n != vals.size()) begin failures++; $display("n %0d expected %0d", n, vals.size()); end
        if (n > 0) begin
          checks++;
          if (res != vals[(n + 1) / 2 - 1]) begin
            failures++; $display("median %0d expected %0d (n=%0d)", res, vals[(n + 1) / 2 - 1], n);
          end
        end
      end
      // stored numbers must survive the in-place computation
      for (int r = 0; r < R; r++) begin
        if (!m_valid[r]) continue;
        @(negedge clk); rd_row = 3'(r); @(negedge clk);
        checks++;
        if (rd_data != m_data[r]) begin failures++; $display("stored row %0d changed", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
