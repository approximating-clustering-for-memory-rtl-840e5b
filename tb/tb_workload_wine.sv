// tb_workload_wine: k-medians clustering of small real data sets on the
// accelerator at its default sizes, with the testbench acting as the host.
//
// Wine records: the 19 red-wine records (12 attributes each: acidity, sugar,
// chlorides, sulfur dioxide, density, pH, sulphates, alcohol, quality) are
// clustered into k = 3 groups. The host assigns every record to the centre
// with the smallest L1 distance, then, attribute by attribute, clears the
// accelerator, writes the 19 values as doubles (converted to fixed point on
// the way in) with the records' cluster labels, and asks for the median of
// each cluster; the medians become the new centres. This repeats until no
// record changes cluster. Every median is compared with one found by sorting
// the same fixed-point words.
//
// Census extract: the eight numeric columns of a five-state table (total
// population, migration rates, birth and death rates, age groups; some
// negative) are loaded one column at a time and their medians checked.
module tb_workload_wine;
  localparam int NREC = 19, NATT = 12, K = 3;

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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real wine [NREC][NATT] = '{
    '{7.4, 0.7, 0.0, 1.9, 0.076, 11.0, 34.0, 0.9978, 3.51, 0.56, 9.4, 5.0},
    '{7.8, 0.88, 0.0, 2.6, 0.098, 25.0, 67.0, 0.9968, 3.2, 0.68, 9.8, 5.0},
    '{7.8, 0.76, 0.04, 2.3, 0.092, 15.0, 54.0, 0.997, 3.26, 0.65, 9.8, 5.0},
    '{11.2, 0.28, 0.56, 1.9, 0.075, 17.0, 60.0, 0.998, 3.16, 0.58, 9.8, 6.0},
    '{7.4, 0.7, 0.0, 1.9, 0.076, 11.0, 34.0, 0.9978, 3.51, 0.56, 9.4, 5.0},
    '{7.4, 0.66, 0.0, 1.8, 0.075, 13.0, 40.0, 0.9978, 3.51, 0.56, 9.4, 5.0},
    '{7.9, 0.6, 0.06, 1.6, 0.069, 15.0, 59.0, 0.9964, 3.3, 0.46, 9.4, 5.0},
    '{7.3, 0.65, 0.0, 1.2, 0.065, 15.0, 21.0, 0.9946, 3.39, 0.47, 10.0, 7.0},
    '{7.8, 0.58, 0.02, 2.0, 0.073, 9.0, 18.0, 0.9968, 3.36, 0.57, 9.5, 7.0},
    '{7.5, 0.5, 0.36, 6.1, 0.071, 17.0, 102.0, 0.9978, 3.35, 0.8, 10.5, 5.0},
    '{6.7, 0.58, 0.08, 1.8, 0.097, 15.0, 65.0, 0.9959, 3.28, 0.54, 9.2, 5.0},
    '{7.5, 0.5, 0.36, 6.1, 0.071, 17.0, 102.0, 0.9978, 3.35, 0.8, 10.5, 5.0},
    '{5.6, 0.615, 0.0, 1.6, 0.089, 16.0, 59.0, 0.9943, 3.58, 0.52, 9.9, 5.0},
    '{7.8, 0.61, 0.29, 1.6, 0.114, 9.0, 29.0, 0.9974, 3.26, 1.56, 9.1, 5.0},
    '{8.9, 0.62, 0.18, 3.8, 0.176, 52.0, 145.0, 0.9986, 3.16, 0.88, 9.2, 5.0},
    '{8.9, 0.62, 0.19, 3.9, 0.17, 51.0, 148.0, 0.9986, 3.17, 0.93, 9.2, 5.0},
    '{8.5, 0.28, 0.56, 1.8, 0.092, 35.0, 103.0, 0.9969, 3.3, 0.75, 10.5, 7.0},
    '{8.1, 0.56, 0.28, 1.7, 0.368, 16.0, 56.0, 0.9968, 3.11, 1.28, 9.3, 5.0},
    '{7.4, 0.59, 0.08, 4.4, 0.086, 6.0, 29.0, 0.9974, 3.38, 0.5, 9.0, 4.0}};

  real census [5][8] = '{
    '{4464356.0, -1.78, -0.02, 0.69, 14.41, 10.28, 869.21, 130.79},
    '{634892.0, -1.72, -0.24, 2.09, 15.95, 4.64, 941.95, 58.05},
    '{5307331.0, 14.25, -0.03, 4.29, 15.88, 7.77, 869.54, 130.46},
    '{2692090.0, 0.36, -0.01, 1.07, 14.35, 10.51, 861.06, 138.94},
    '{34501130.0, -2.01, -0.04, 7.88, 15.37, 6.72, 894.03, 105.97}};

  function automatic logic [63:0] to_fixed(real x);
    real r;
    longint t;
    r = x * 8388608.0;
    t = longint'(r);
    if (r >= 0.0 && real'(t) > r) t = t - 1;
    if (r < 0.0 && real'(t) < r) t = t + 1;
    return 64'(t) ^ 64'h8000_0000_0000_0000;
  endfunction

  function automatic real from_fixed(logic [63:0] f);
    return real'($signed(f ^ 64'h8000_0000_0000_0000)) / 8388608.0;
  endfunction

  task automatic load_column(real v [$], int lbl [$]);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (v[i]) begin
      @(negedge clk);
      wr_en = 1; wr_float = 1; wr_addr = 10'(i * 37); wr_data = $realtobits(v[i]); wr_label = 4'(lbl[i]);
      @(negedge clk);
      wr_en = 0; wr_float = 0;
    end
  endtask

  // median of cluster cl through the accelerator, checked against sorting
  task automatic median_of(real v [$], int lbl [$], int cl, output bit ok, output real m);
    logic [63:0] w [$];
    foreach (v[i]) if (lbl[i] == cl) w.push_back(to_fixed(v[i]));
    w.sort();
    @(negedge clk); start = 1; start_cluster = 4'(cl); start_rank = 0;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    ok = (w.size() > 0);
    m = from_fixed(result);
    checks++;
    if (empty != (w.size() == 0)) begin failures++; $display("empty flag wrong for cluster %0d", cl); end
    if (w.size() > 0) begin
      checks++;
      if (result != w[(w.size() + 1) / 2 - 1]) begin
        failures++; $display("cluster %0d: median %h expected %h", cl, result, w[(w.size() + 1) / 2 - 1]);
      end
    end
  endtask

  initial begin
    real cen [K][NATT];
    int  asg [NREC];
    int  iter;
    bit  changed, ok;
    real v [$];
    int  lbl [$];
    real m, d, best;
    int  bi;
    clear = 0; wr_en = 0; wr_label_only = 0; wr_float = 0; wr_addr = 0; wr_data = 0;
    wr_label = 0; rd_addr = 0; start = 0; start_cluster = 0; start_rank = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- k-medians on the wine records ----
    for (int a = 0; a < NATT; a++) begin
      cen[0][a] = wine[0][a]; cen[1][a] = wine[3][a]; cen[2][a] = wine[14][a];
    end
    foreach (asg[i]) asg[i] = -1;
    iter = 0;
    do begin
      changed = 0;
      for (int r = 0; r < NREC; r++) begin
        best = 1.0e30; bi = 0;
        for (int c = 0; c < K; c++) begin
          d = 0.0;
          for (int a = 0; a < NATT; a++) d += (wine[r][a] > cen[c][a]) ? wine[r][a] - cen[c][a] : cen[c][a] - wine[r][a];
          if (d < best) begin best = d; bi = c; end
        end
        if (asg[r] != bi) changed = 1;
        asg[r] = bi;
      end
      for (int a = 0; a < NATT; a++) begin
        v.delete(); lbl.delete();
        for (int r = 0; r < NREC; r++) begin v.push_back(wine[r][a]); lbl.push_back(asg[r]); end
        load_column(v, lbl);
        for (int c = 0; c < K; c++) begin
          median_of(v, lbl, c, ok, m);
          if (ok) cen[c][a] = m;
        end
      end
      iter++;
    end while (changed && iter < 10);
    checks++;
    if (changed) begin failures++; $display("k-medians did not converge in 10 iterations"); end
    $display("wine: converged after %0d iterations", iter);
    for (int c = 0; c < K; c++)
      $display("  centre %0d: acidity %f  free SO2 %f  total SO2 %f  alcohol %f", c, cen[c][0], cen[c][5], cen[c][6], cen[c][10]);

    // ---- census extract, one column at a time ----
    for (int col = 0; col < 8; col++) begin
      v.delete(); lbl.delete();
      for (int r = 0; r < 5; r++) begin v.push_back(census[r][col]); lbl.push_back(0); end
      load_column(v, lbl);
      median_of(v, lbl, 0, ok, m);
      $display("census column %0d median %f", col, m);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
