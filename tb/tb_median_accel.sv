// tb_median_accel: end-to-end test of the accelerator at its default sizes
// (64-bit words, 16 subarrays of 64 rows, 16-row segments, 16 clusters).
//
// Phases:
//   1. all 1024 rows written with random words (wide and narrow ranges, so
//      that duplicates and tied votes occur) and random labels 0..14; label 15
//      is left empty. Read-back of sampled rows.
//   2. median of many clusters, plus rank queries (1, n, random, above n).
//   3. label-only rewrites that move points between clusters, then medians.
//   4. clear, then doubles written through the float path: the fixed-acidity
//      column of the wine records, negative values and saturating values.
// Every result is compared with the rank-th smallest word found by sorting
// the testbench's own copy (floats converted with real arithmetic), and
// every run's start-to-done time with (64 + 1) * (4 + 4 + 3) = 715 edges.
// The mechanisms of the design are counted and each must occur: votes with
// minority rows (propagation), tied votes, empty cluster, rank mode, float
// conversion, saturation, label-only rewrite, clusters spread over several
// subarrays.
module tb_median_accel;
  localparam int W = 64, ROWS = 64, ARRAYS = 16, POINTS = ROWS * ARRAYS;
  localparam int LAT_EXP = (W + 1) * (ROWS / 16 + 4 + 3);

  logic clk = 0, rst_n = 0;
  logic clear, wr_en, wr_label_only, wr_float, fp_sat;
  logic [9:0] wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data, result;
  logic [3:0] wr_label, start_cluster;
  logic [10:0] start_rank, n_sel, vote_ones;
  logic start, busy, done, empty, vote_valid, vote_bit;
  int checks = 0, failures = 0;

  median_accel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference copy
  logic [63:0] m_data [POINTS];
  logic [3:0]  m_label [POINTS];
  bit          m_valid [POINTS];

  // mechanism counters
  int n_prop = 0, n_tie = 0, n_empty = 0, n_rank = 0, n_float = 0, n_sat = 0;
  int n_relabel = 0, n_spread = 0;

  always @(posedge clk) begin
    if (vote_valid) begin
      if (vote_ones != 0 && vote_ones != n_sel) n_prop++;
      if (2 * int'(vote_ones) == int'(n_sel)) n_tie++;
    end
  end

  function automatic logic [63:0] to_fixed(real x);
    real r;
    longint t;
    r = x * 8388608.0;
    if (r >= 9223372036854775808.0) return 64'hffff_ffff_ffff_ffff;
    if (r <= -9223372036854775808.0) return 64'h0;
    t = longint'(r);
    if (r >= 0.0 && real'(t) > r) t = t - 1;
    if (r < 0.0 && real'(t) < r) t = t + 1;
    return 64'(t) ^ 64'h8000_0000_0000_0000;
  endfunction

  task automatic write_word(int a, logic [63:0] d, logic [3:0] lb);
    @(negedge clk);
    wr_en = 1; wr_label_only = 0; wr_float = 0; wr_addr = 10'(a); wr_data = d; wr_label = lb;
    @(negedge clk);
    wr_en = 0;
    m_data[a] = d; m_label[a] = lb; m_valid[a] = 1;
  endtask

  task automatic write_real(int a, real x, logic [3:0] lb);
    logic [63:0] e;
    @(negedge clk);
    wr_en = 1; wr_label_only = 0; wr_float = 1; wr_addr = 10'(a); wr_data = $realtobits(x); wr_label = lb;
    #1;
    e = to_fixed(x);
    if (fp_sat) n_sat++;
    n_float++;
    @(negedge clk);
    wr_en = 0; wr_float = 0;
    m_data[a] = e; m_label[a] = lb; m_valid[a] = 1;
  endtask

  task automatic relabel(int a, logic [3:0] lb);
    @(negedge clk);
    wr_en = 1; wr_label_only = 1; wr_addr = 10'(a); wr_data = '0; wr_label = lb;
    @(negedge clk);
    wr_en = 0; wr_label_only = 0;
    m_label[a] = lb;
    n_relabel++;
  endtask

  task automatic query(int cl, int rk);
    logic [63:0] vals [$];
    int k, t0, t1, arrs;
    bit seen [ARRAYS];
    vals.delete();
    foreach (seen[i]) seen[i] = 0;
    for (int a = 0; a < POINTS; a++)
      if (m_valid[a] && m_label[a] == 4'(cl)) begin vals.push_back(m_data[a]); seen[a / ROWS] = 1; end
    vals.sort();
    arrs = 0;
    foreach (seen[i]) arrs += seen[i];
    if (arrs > 1) n_spread++;
    if (rk != 0) n_rank++;
    @(negedge clk);
    start = 1; start_cluster = 4'(cl); start_rank = 11'(rk);
    @(posedge clk); t0 = $time;
    @(negedge clk); start = 0;
    wait (done);
    t1 = $time;
    @(negedge clk);
    checks++;
    if (empty != (vals.size() == 0)) begin failures++; $display("cluster %0d: empty flag %0d", cl, empty); end
    if (vals.size() == 0) begin
      n_empty++;
      return;
    end
    checks++;
    if ((t1 - t0) / 10 != LAT_EXP) begin failures++; $display("latency %0d expected %0d", (t1 - t0) / 10, LAT_EXP); end
    checks++;
    if (int'(n_sel) != vals.size()) begin failures++; $display("n_sel %0d expected %0d", n_sel, vals.size()); end
    k = (rk == 0) ? (vals.size() + 1) / 2 : (rk > vals.size() ? vals.size() : rk);
    checks++;
    if (result != vals[k-1]) begin
      failures++; $display("cluster %0d rank %0d (n=%0d): %h expected %h", cl, rk, vals.size(), result, vals[k-1]);
    end
  endtask

  real acidity [19] = '{7.4, 7.8, 7.8, 11.2, 7.4, 7.4, 7.9, 7.3, 7.8, 7.5,
                        6.7, 7.5, 5.6, 7.8, 8.9, 8.9, 8.5, 8.1, 7.4};

  initial begin
    real med;
    clear = 0; wr_en = 0; wr_label_only = 0; wr_float = 0; wr_addr = 0; wr_data = 0;
    wr_label = 0; rd_addr = 0; start = 0; start_cluster = 0; start_rank = 0;
    foreach (m_valid[i]) m_valid[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. load
    for (int a = 0; a < POINTS; a++) begin
      logic [63:0] d;
      if (a % 3 == 0)      d = 64'($urandom_range(0, 7));
      else if (a % 3 == 1) d = {$urandom, $urandom};
      else                 d = {32'h0, $urandom};
      write_word(a, d, 4'($urandom_range(0, 14)));
    end
    for (int i = 0; i < 64; i++) begin
      int a;
      a = $urandom_range(0, POINTS - 1);
      @(negedge clk); rd_addr = 10'(a);
      @(negedge clk); @(negedge clk);
      checks++;
      if (rd_data != m_data[a]) begin failures++; $display("read %0d: %h expected %h", a, rd_data, m_data[a]); end
    end

    // 2. medians and ranks
    for (int cl = 0; cl < 16; cl++) query(cl, 0);
    query(3, 1);
    query(4, 2000);
    query(5, 10);
    query(6, 1);
    // a cluster holding only a few narrow-range points, for tied votes
    for (int a = 0; a < 6; a++) write_word(a * 150, 64'(a % 3), 4'd14);
    for (int a = 0; a < POINTS; a++) if (m_label[a] == 4'd14 && (a % 150) != 0) relabel(a, 4'd13);
    query(14, 0);

    // 3. re-assignment
    for (int i = 0; i < 200; i++) relabel($urandom_range(0, POINTS - 1), 4'($urandom_range(0, 3)));
    for (int cl = 0; cl < 4; cl++) query(cl, 0);

    // 4. float path
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (m_valid[i]) m_valid[i] = 0;
    foreach (acidity[i]) write_real(i * 53, acidity[i], 4'd2);
    query(2, 0);
    med = real'($signed(result ^ 64'h8000_0000_0000_0000)) / 8388608.0;
    checks++;
    if (med < 7.79 || med > 7.81) begin failures++; $display("acidity median %f expected 7.8", med); end
    for (int i = 0; i < 40; i++) begin
      real x;
      x = (real'($urandom_range(0, 2000000)) - 1000000.0) / 1000.0;
      if (i == 7)  x = 1.0e30;
      if (i == 8)  x = -1.0e30;
      write_real(300 + i, x, 4'd9);
    end
    query(9, 0);
    query(9, 1);
    query(9, 40);
    query(2, 0);  // cluster 2 untouched by the later writes

    checks++; if (n_prop == 0)    begin failures++; $display("no propagation seen"); end
    checks++; if (n_tie == 0)     begin failures++; $display("no tied vote seen"); end
    checks++; if (n_empty == 0)   begin failures++; $display("no empty cluster seen"); end
    checks++; if (n_rank == 0)    begin failures++; $display("no rank query seen"); end
    checks++; if (n_float == 0)   begin failures++; $display("no float write seen"); end
    checks++; if (n_sat == 0)     begin failures++; $display("no saturation seen"); end
    checks++; if (n_relabel == 0) begin failures++; $display("no relabel seen"); end
    checks++; if (n_spread == 0)  begin failures++; $display("no multi-array cluster seen"); end
    $display("mechanisms: propagation=%0d ties=%0d empty=%0d rank=%0d float=%0d sat=%0d relabel=%0d spread=%0d",
             n_prop, n_tie, n_empty, n_rank, n_float, n_sat, n_relabel, n_spread);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
