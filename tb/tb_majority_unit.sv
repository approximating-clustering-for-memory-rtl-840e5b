// tb_majority_unit: every combination of n, ones and rank for a 6-bit unit.
// The expected bit is read off an explicit sorted list of n bits (zeros
// first): the rank-th smallest entry, with rank 0 meaning ceil(n/2) and a rank
// above n meaning n. For rank 0 the bit must also match the paper's majority
// rule: 0 when n/2 or more of the inputs are 0.
module tb_majority_unit;
  localparam int W = 6;

  logic [W-1:0] n, ones, rank, rank_used;
  logic bit_out;
  int checks = 0, failures = 0;

  majority_unit #(.CNT_W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit list [64];
    int k, expb;
    for (int nn = 1; nn < 64; nn++) begin
      for (int oo = 0; oo <= nn; oo++) begin
        for (int i = 0; i < nn; i++) list[i] = (i >= nn - oo);
        for (int rr = 0; rr < 64; rr++) begin
          n = W'(nn); ones = W'(oo); rank = W'(rr);
          #1;
          k = (rr == 0) ? (nn + 1) / 2 : (rr > nn ? nn : rr);
          expb = list[k - 1];
          checks++;
          if (bit_out != expb[0]) begin
            failures++;
            $display("n=%0d ones=%0d rank=%0d: bit %0d expected %0d", nn, oo, rr, bit_out, expb);
          end
          if (rr == 0) begin
            checks++;
            if (bit_out != !(2 * (nn - oo) >= nn)) begin
              failures++;
              $display("majority rule broken: n=%0d ones=%0d", nn, oo);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
