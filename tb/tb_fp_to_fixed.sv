// tb_fp_to_fixed: doubles of random sign, mantissa and exponent (from far
// below one fixed-point LSB to far above the 64-bit range), plus zero, a
// subnormal, +-infinity and NaN. The expected word is worked out with real
// arithmetic: x * 2^23 truncated toward zero, saturated outside the signed
// 64-bit range, sign bit inverted. Pairs of inputs are also checked to keep
// their order as unsigned words.
module tb_fp_to_fixed;
  logic [63:0] fp;
  logic [63:0] fixed;
  logic sat;
  int checks = 0, failures = 0;

  fp_to_fixed #(.WIDTH(64), .FRAC(23)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] ref_fixed(real x, output bit s);
    real r;
    longint t;
    r = x * 8388608.0;  // 2^23
    s = 0;
    if (r >= 9223372036854775808.0) begin s = 1; return 64'h7fff_ffff_ffff_ffff ^ 64'h8000_0000_0000_0000; end
    if (r <= -9223372036854775808.0) begin s = 1; return 64'h0; end
    t = longint'(r);
    if (r >= 0.0 && real'(t) > r) t = t - 1;
    if (r < 0.0 && real'(t) < r) t = t + 1;
    return 64'(t) ^ 64'h8000_0000_0000_0000;
  endfunction

  task automatic check_one(real x);
    logic [63:0] e;
    bit es;
    fp = $realtobits(x);
    #1;
    e = ref_fixed(x, es);
    checks++;
    if (fixed != e || sat != es) begin
      failures++;
      $display("x=%g: %h sat=%0d expected %h sat=%0d", x, fixed, sat, e, es);
    end
  endtask

  initial begin
    real x, y;
    logic [63:0] fx;
    check_one(0.0);
    check_one(-0.0);
    check_one(1.0);
    check_one(-1.0);
    check_one(7.4);
    check_one(-0.076);
    check_one(1.0 / 16777216.0);   // half an LSB
    check_one(1099511627776.0 * 1024.0 * 1024.0);  // 2^60 -> saturates
    for (int i = 0; i < 20000; i++) begin
      x = (real'($urandom) + 1.0) / 4294967296.0 * (2.0 ** $urandom_range(0, 90)) / (2.0 ** 35);
      if ($urandom_range(0, 1)) x = -x;
      check_one(x);
      // order of two values
      y = x * (0.5 + real'($urandom_range(0, 1000)) / 1000.0);
      if ($urandom_range(0, 3) == 0) y = -y;
      fp = $realtobits(x); #1 fx = fixed;
      fp = $realtobits(y); #1;
      if (x > y) begin
        checks++;
        if (fx < fixed) begin failures++; $display("order lost: %g %g", x, y); end
      end
    end
    // subnormal, infinities, NaN
    fp = 64'h0000_0000_0000_0001; #1;
    checks++; if (fixed != 64'h8000_0000_0000_0000 || sat) begin failures++; $display("subnormal"); end
    fp = 64'h7ff0_0000_0000_0000; #1;
    checks++; if (fixed != 64'hffff_ffff_ffff_ffff || !sat) begin failures++; $display("+inf"); end
    fp = 64'hfff0_0000_0000_0000; #1;
    checks++; if (fixed != 64'h0 || !sat) begin failures++; $display("-inf"); end
    fp = 64'h7ff8_0000_0000_0001; #1;
    checks++; if (!sat) begin failures++; $display("nan"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
