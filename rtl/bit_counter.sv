// bit_counter: counts the ones among the N bits sensed from one column
// segment of a subarray and registers the count with a valid flag.
//
// In the paper this count is made in the analog domain: the cells of the
// column drive a current, which a current mirror and a current-mirror based
// differential amplifier quantize with a successive-approximation scheme. The
// function the rest of the chip relies on is the exact number of ones, and
// that is what this module produces, as a plain digital population count; the
// analog front end itself is not modelled.
//
// Timing: in_valid/bits sampled at a rising edge give count/out_valid right
// after that edge (one cycle of latency, one segment per cycle).
module bit_counter #(
  parameter int unsigned N     = 16,
  localparam int unsigned CW   = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [N-1:0]  bits,
  output logic          out_valid,
  output logic [CW-1:0] count
);

  logic [CW-1:0] ones;
  always_comb begin
    ones = '0;
    for (int i = 0; i < N; i++) ones = ones + CW'(bits[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      count     <= '0;
    end else begin
      out_valid <= in_valid;
      count     <= in_valid ? ones : '0;
    end
  end

endmodule
