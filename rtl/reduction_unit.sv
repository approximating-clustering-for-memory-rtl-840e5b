// reduction_unit: one node of the reduction tree. It adds the partial counts
// coming from its two children and registers the sum, one bit wider than its
// inputs so that it cannot overflow.
//
// The paper names the units of the interconnection tree and says they merge
// partial counts; the two-input adder with one register per node is this
// design's choice. The output valid is the AND of the input valids (both
// children of a node always carry the same step, as the tree is balanced).
//
// Timing: one cycle from inputs to sum; a new pair can enter every cycle.
module reduction_unit #(
  parameter int unsigned IN_W = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            a_valid,
  input  logic [IN_W-1:0] a,
  input  logic            b_valid,
  input  logic [IN_W-1:0] b,
  output logic            sum_valid,
  output logic [IN_W:0]   sum
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_valid <= 1'b0;
      sum       <= '0;
    end else begin
      sum_valid <= a_valid && b_valid;
      sum       <= {1'b0, a} + {1'b0, b};
    end
  end

endmodule
