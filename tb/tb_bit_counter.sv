// tb_bit_counter: random and corner bit patterns into a 16-input bit counter;
// every count is checked against a bit-by-bit sum one cycle later, and
// out_valid must follow in_valid with one cycle of latency.
module tb_bit_counter;
  localparam int N  = 16;
  localparam int CW = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [N-1:0] bits;
  logic out_valid;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  bit_counter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_count(logic [N-1:0] v);
    int c = 0;
    for (int i = 0; i < N; i++) if (v[i]) c++;
    return c;
  endfunction

  initial begin
    logic [N-1:0] pat;
    logic         pv;
    in_valid = 0; bits = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      case (t)
        0: pat = '0;
        1: pat = '1;
        2: pat = 16'h8001;
        default: pat = N'($urandom);
      endcase
      pv = (t % 7) != 3;
      bits = pat; in_valid = pv;
      @(posedge clk); #1;
      checks++;
      if (out_valid !== pv) begin failures++; $display("valid mismatch at %0d", t); end
      if (pv) begin
        checks++;
        if (count != CW'(ref_count(pat))) begin
          failures++; $display("count %0d expected %0d for %h", count, ref_count(pat), pat);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
