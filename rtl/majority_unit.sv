// majority_unit: decides one result bit of the bit-serial rank search.
//
// Inputs are the number of rows taking part (n) and how many of them hold a 1
// in the current column (ones). The paper's majority function outputs 0 when
// N/2 or more of its inputs are 0, and 1 otherwise; it also describes the
// general filter that returns the i-th smallest input, the median being the
// case i = N/2. This unit implements the general form: with zeros = n - ones,
// the bit is 0 when zeros >= rank and 1 otherwise. The rank used is `rank`
// when it is not zero, and ceil(n/2) when `rank` is zero, which is the paper's
// majority rule and yields the lower median for an even n. A rank above n is
// clamped to n (the largest value).
//
// Purely combinational.
module majority_unit #(
  parameter int unsigned CNT_W = 11
) (
  input  logic [CNT_W-1:0] n,
  input  logic [CNT_W-1:0] ones,
  input  logic [CNT_W-1:0] rank,
  output logic [CNT_W-1:0] rank_used,
  output logic             bit_out
);

  logic [CNT_W-1:0] zeros;
  logic [CNT_W:0]   half_up;

  always_comb begin
    zeros   = n - ones;
    half_up = ({1'b0, n} + (CNT_W+1)'(1)) >> 1;
    if (rank == '0)     rank_used = half_up[CNT_W-1:0];
    else if (rank > n)  rank_used = n;
    else                rank_used = rank;
    bit_out = !(zeros >= rank_used);
  end

endmodule
