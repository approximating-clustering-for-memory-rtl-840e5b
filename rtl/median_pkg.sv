// median_pkg: types and default sizes shared by the bit-serial median
// accelerator.
//
// The accelerator finds the median (or any other rank) of the numbers held by
// the rows of one cluster. The numbers are 64-bit fixed-point words, the width
// named by the paper. The array geometry (rows per subarray, rows sensed per
// step, number of subarrays) is not given by the paper and is this design's
// own choice. The 16-cluster label space follows the largest cluster count in
// the paper's recognition-rate table.
package median_pkg;

  // Width of one stored number (paper: 64-bit fixed point).
  localparam int unsigned WIDTH_DEF    = 64;
  // Rows per subarray (own choice).
  localparam int unsigned ROWS_DEF     = 64;
  // Rows of one column sensed in one step (own choice; the paper senses
  // "only a fraction of the cells within each column" at a time).
  localparam int unsigned SEG_ROWS_DEF = 16;
  // Number of subarrays merged by the reduction tree (own choice).
  localparam int unsigned ARRAYS_DEF   = 16;
  // Cluster label width: 16 clusters, the largest count the paper evaluates.
  localparam int unsigned LABEL_W_DEF  = 4;
  // Fractional bits of the fixed-point format (scale factor 2^23).
  localparam int unsigned FRAC_DEF     = 23;

  // Operation the controller broadcasts to every subarray in a cycle.
  typedef enum logic [2:0] {
    OP_IDLE       = 3'd0,  // nothing
    OP_COPY       = 3'd1,  // working copy <= stored data, select rows of the cluster
    OP_SENSE_SEL  = 3'd2,  // sense the select bits of one segment (row count)
    OP_SENSE_COL  = 3'd3,  // sense one bit column of one segment (vote)
    OP_PROPAGATE  = 3'd4   // minority rows copy their bit into all lower bits
  } array_op_e;

endpackage
