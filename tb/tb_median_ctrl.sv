// tb_median_ctrl: the controller against a behavioural stand-in for the
// subarrays, bit counters and reduction tree. The stand-in holds 24 rows of
// 12-bit numbers with labels, obeys the broadcast operations (copy, sensing
// of one 8-row segment, propagation) and returns each segment's count after
// 1 + LAT cycles, as counter plus tree would. Random clusters and ranks are
// requested; each result is compared with the rank-th smallest number found
// by sorting, n_sel and empty with direct counts, and the start-to-done time
// with (WIDTH + 1) * (SEGS + LAT + 3) clock edges (SEGS + LAT + 3 for an
// empty cluster).
module tb_median_ctrl;
  import median_pkg::*;
  localparam int W = 12, SEGS = 3, SR = 8, R = SEGS * SR, LAT = 2, L = 2;
  localparam int ACC_W = 5, TOT_W = 4;

  logic clk = 0, rst_n = 0;
  logic start, busy, done, empty, vote_valid, vote_bit, maj_bit, tot_valid;
  logic [L-1:0] start_cluster, cluster_sel;
  logic [ACC_W-1:0] start_rank, n_sel, vote_ones;
  logic [W-1:0] result;
  array_op_e op;
  logic [3:0] col;
  logic [1:0] seg;
  logic [TOT_W-1:0] total;
  int checks = 0, failures = 0;

  median_ctrl #(.WIDTH(W), .SEGS(SEGS), .LABEL_W(L), .TOT_W(TOT_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stand-in for arrays + counters + tree ----
  logic [W-1:0] m_data [R];
  logic [L-1:0] m_label [R];
  logic [W-1:0] m_work [R];
  logic         m_sel [R];
  logic         pv [LAT+1];
  int           pc [LAT+1];

  always @(posedge clk) begin
    int cnt;
    cnt = 0;
    if (op == OP_SENSE_SEL)
      for (int i = 0; i < SR; i++) cnt += m_sel[int'(seg)*SR+i];
    if (op == OP_SENSE_COL)
      for (int i = 0; i < SR; i++) cnt += (m_sel[int'(seg)*SR+i] && m_work[int'(seg)*SR+i][col]);
    for (int k = LAT; k > 0; k--) begin pv[k] <= pv[k-1]; pc[k] <= pc[k-1]; end
    pv[0] <= rst_n && (op == OP_SENSE_SEL || op == OP_SENSE_COL);
    pc[0] <= cnt;
    if (op == OP_COPY)
      for (int r = 0; r < R; r++) begin
        m_work[r] <= m_data[r];
        m_sel[r]  <= (m_label[r] == cluster_sel);
      end
    if (op == OP_PROPAGATE)
      for (int r = 0; r < R; r++)
        if (m_sel[r] && m_work[r][col] != maj_bit)
          for (int k = 0; k < W; k++) if (k < int'(col)) m_work[r][k] <= m_work[r][col];
  end
  assign tot_valid = pv[LAT];
  assign total     = TOT_W'(pc[LAT]);

  int votes = 0;
  always @(posedge clk) if (vote_valid) votes++;

  initial begin
    logic [W-1:0] vals [$];
    int cl, rk, k, t0, lat_exp, v0;
    start = 0; start_cluster = 0; start_rank = 0;
    for (int i = 0; i <= LAT; i++) begin pv[i] = 0; pc[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    lat_exp = (W + 1) * (SEGS + LAT + 3);
    for (int round = 0; round < 60; round++) begin
      // new data; cluster 3 is left empty in every round
      for (int r = 0; r < R; r++) begin
        m_data[r]  = (round % 3 == 0) ? W'($urandom_range(0, 7)) : W'($urandom);
        m_label[r] = L'($urandom_range(0, 2));
      end
      for (int q = 0; q < 4; q++) begin
        cl = (q == 3) ? 3 : $urandom_range(0, 2);
        rk = (q == 1) ? $urandom_range(1, 30) : 0;
        vals.delete();
        for (int r = 0; r < R; r++) if (m_label[r] == L'(cl)) vals.push_back(m_data[r]);
        vals.sort();
        @(negedge clk);
        start = 1; start_cluster = L'(cl); start_rank = ACC_W'(rk);
        @(posedge clk); t0 = $time; v0 = votes;
        @(negedge clk); start = 0;
        checks++;
        if (!busy) begin failures++; $display("not busy after start"); end
        wait (done);
        checks++;
        if (($time - t0) / 10 != ((vals.size() == 0) ? SEGS + LAT + 3 : lat_exp)) begin
          failures++; $display("latency %0d expected %0d", ($time - t0) / 10, lat_exp);
        end
        @(negedge clk);
        checks++;
        if (int'(n_sel) != vals.size() && vals.size() != 0) begin
          failures++; $display("n_sel %0d expected %0d", n_sel, vals.size());
        end
        checks++;
        if (empty != (vals.size() == 0)) begin failures++; $display("empty flag wrong"); end
        if (vals.size() > 0) begin
          k = (rk == 0) ? (vals.size() + 1) / 2 : (rk > vals.size() ? vals.size() : rk);
          checks++;
          if (result != vals[k-1]) begin
            failures++; $display("cluster %0d rank %0d: %0d expected %0d", cl, rk, result, vals[k-1]);
          end
          checks++;
          if (votes - v0 != W) begin failures++; $display("%0d votes, expected %0d", votes - v0, W); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
