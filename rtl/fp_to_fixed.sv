// fp_to_fixed: converts an IEEE-754 double into the fixed-point word the
// subarrays store.
//
// The paper keeps its data in a 64-bit fixed-point format, obtained by
// scaling the floating-point inputs by a constant factor (printed as "23",
// read here as 2^23) and converting them. So the result is
// round_toward_zero(x * 2^FRAC) as a WIDTH-bit two's-complement number,
// saturated at the largest magnitudes when it does not fit (and for
// infinities and NaN, which also raise `sat`). Zero and subnormal inputs give
// zero. The paper does not say how negative numbers are ordered; the
// bit-serial search compares numbers as unsigned words, so the word is stored
// in offset-binary form (two's complement with the sign bit inverted), whose
// unsigned order equals the signed order. Rounding, saturation and the
// offset-binary form are this design's choices.
//
// Purely combinational.
module fp_to_fixed
  import median_pkg::*;
#(
  parameter int unsigned WIDTH = WIDTH_DEF,
  parameter int unsigned FRAC  = FRAC_DEF
) (
  input  logic [63:0]      fp,
  output logic [WIDTH-1:0] fixed,
  output logic             sat
);

  localparam int unsigned XW = WIDTH + 64;

  logic            sign;
  logic [10:0]     expo;
  logic [52:0]     sig;
  logic [XW-1:0]   mag;
  logic [WIDTH-1:0] val;
  int              sh;

  always_comb begin
    sign = fp[63];
    expo = fp[62:52];
    sig  = {1'b1, fp[51:0]};
    sh   = int'(expo) - 1023 + int'(FRAC) - 52;
    sat  = 1'b0;
    mag  = '0;
    if (expo == 11'h7ff) begin
      sat = 1'b1;
    end else if (expo != 11'h000) begin
      if (sh >= 0) begin
        if (52 + sh > int'(WIDTH) - 2) sat = 1'b1;
        else                           mag = XW'(sig) << sh;
      end else if (-sh < 53) begin
        mag = XW'(sig) >> (-sh);
      end
    end
    if (sat) val = sign ? {1'b1, {(WIDTH-1){1'b0}}} : {1'b0, {(WIDTH-1){1'b1}}};
    else     val = sign ? -mag[WIDTH-1:0] : mag[WIDTH-1:0];
    fixed = {~val[WIDTH-1], val[WIDTH-2:0]};
  end

endmodule
