// tb_reduction_tree: two trees, the default 16-input one and a 5-input one
// (padded to 8), are fed a new random set of partial counts every cycle. Each
// total must equal the plain sum of its set and come out exactly
// ceil(log2(N_IN)) cycles later (4 and 3 cycles).
module tb_reduction_tree;
  localparam int IN_W = 5;
  localparam int NA = 16, NB = 5;
  localparam int LA = 4,  LB = 3;
  localparam int T  = 300;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [IN_W-1:0] ca [NA];
  logic [IN_W-1:0] cb [NB];
  logic va, vb;
  logic [IN_W+LA-1:0] ta;
  logic [IN_W+LB-1:0] tb;
  int checks = 0, failures = 0;
  int exp_a [T], exp_b [T];
  int cyc = 0;

  reduction_tree #(.N_IN(NA), .IN_W(IN_W)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .counts(ca), .out_valid(va), .total(ta));
  reduction_tree #(.N_IN(NB), .IN_W(IN_W)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .counts(cb), .out_valid(vb), .total(tb));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver: set t enters in cycle t
  initial begin
    in_valid = 0;
    foreach (ca[i]) ca[i] = '0;
    foreach (cb[i]) cb[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      in_valid = 1;
      exp_a[t] = 0; exp_b[t] = 0;
      foreach (ca[i]) begin
        ca[i] = (t == 0) ? 5'd16 : IN_W'($urandom_range(0, 16));
        exp_a[t] += int'(ca[i]);
      end
      foreach (cb[i]) begin
        cb[i] = (t == 0) ? 5'd31 : IN_W'($urandom_range(0, 31));
        exp_b[t] += int'(cb[i]);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (cyc != 2 * T) begin failures++; $display("saw %0d totals, expected %0d", cyc, 2 * T); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: counts which cycle a set entered and checks the latency
  int in_cnt = 0, out_a = 0, out_b = 0;
  int in_cycle [T];
  int now = 0;
  always @(posedge clk) begin
    now <= now + 1;
    if (rst_n && in_valid) begin
      in_cycle[in_cnt] = now;
      in_cnt++;
    end
    if (va) begin
      checks++;
      if (int'(ta) != exp_a[out_a] || now - in_cycle[out_a] != LA) begin
        failures++;
        $display("A: total %0d expected %0d, latency %0d", ta, exp_a[out_a], now - in_cycle[out_a]);
      end
      out_a++; cyc++;
    end
    if (vb) begin
      checks++;
      if (int'(tb) != exp_b[out_b] || now - in_cycle[out_b] != LB) begin
        failures++;
        $display("B: total %0d expected %0d, latency %0d", tb, exp_b[out_b], now - in_cycle[out_b]);
      end
      out_b++; cyc++;
    end
  end
endmodule
