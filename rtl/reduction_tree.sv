// reduction_tree: merges the partial counts of N_IN subarrays into a single
// total, the hierarchical merging the paper uses so that no single array has
// to sense a whole column.
//
// It is a balanced binary tree of reduction_unit nodes. N_IN is padded to the
// next power of two with zero counts. Every level adds one bit of width and
// one register, so the total appears LAT = ceil(log2(N_IN)) cycles after the
// partial counts, and a new set of partial counts can enter every cycle
// (fully pipelined). With N_IN = 1 the input is passed on without a register.
// The paper gives neither the fan-in of a node nor the pipelining; both are
// this design's choices.
module reduction_tree #(
  parameter int unsigned N_IN   = 16,
  parameter int unsigned IN_W   = 5,
  localparam int unsigned LEVELS = (N_IN > 1) ? $clog2(N_IN) : 0,
  localparam int unsigned P      = 1 << LEVELS,
  localparam int unsigned OUT_W  = IN_W + LEVELS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  counts [N_IN],
  output logic             out_valid,
  output logic [OUT_W-1:0] total
);

  logic [OUT_W-1:0] node_d [LEVELS+1][P];
  logic             node_v [LEVELS+1][P];

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < N_IN) begin : g_in
      assign node_d[0][i] = OUT_W'(counts[i]);
    end else begin : g_pad
      assign node_d[0][i] = '0;
    end
    assign node_v[0][i] = in_valid;
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    for (genvar j = 0; j < P; j++) begin : g_node
      if (j < (P >> l)) begin : g_unit
        logic [IN_W+l-1:0] sum;
        reduction_unit #(.IN_W(IN_W + l - 1)) u_unit (
          .clk      (clk),
          .rst_n    (rst_n),
          .a_valid  (node_v[l-1][2*j]),
          .a        (node_d[l-1][2*j][IN_W+l-2:0]),
          .b_valid  (node_v[l-1][2*j+1]),
          .b        (node_d[l-1][2*j+1][IN_W+l-2:0]),
          .sum_valid(node_v[l][j]),
          .sum      (sum)
        );
        assign node_d[l][j] = OUT_W'(sum);
      end else begin : g_none
        assign node_d[l][j] = '0;
        assign node_v[l][j] = 1'b0;
      end
    end
  end

  assign total     = node_d[LEVELS][0];
  assign out_valid = node_v[LEVELS][0];

endmodule
