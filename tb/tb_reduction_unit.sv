// tb_reduction_unit: random pairs of partial counts, including the largest
// values, into one reduction unit; the registered sum and its valid (AND of
// both input valids) are checked one cycle later.
module tb_reduction_unit;
  localparam int IN_W = 5;

  logic clk = 0, rst_n = 0;
  logic a_valid, b_valid, sum_valid;
  logic [IN_W-1:0] a, b;
  logic [IN_W:0] sum;
  int checks = 0, failures = 0;

  reduction_unit #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea, eb;
    logic ev;
    a_valid = 0; b_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      ea = (t == 0) ? 31 : int'($urandom_range(0, 31));
      eb = (t == 0) ? 31 : int'($urandom_range(0, 31));
      a = IN_W'(ea); b = IN_W'(eb);
      a_valid = (t % 5) != 1;
      b_valid = (t % 5) != 2;
      ev = a_valid && b_valid;
      @(posedge clk); #1;
      checks++;
      if (sum_valid !== ev) begin failures++; $display("valid mismatch at %0d", t); end
      checks++;
      if (int'(sum) != ea + eb) begin failures++; $display("sum %0d expected %0d", sum, ea + eb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
