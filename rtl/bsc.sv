// bsc: binary-to-stochastic converter.
//
// Compares a two's complement binary value x with a random number r of the
// same width and outputs s = (x > r), one stochastic bit per clock. With r
// uniform over the signed range, the stream's bipolar value is
// x / 2^(WIDTH-1). This is exactly the comparator of the paper; purely
// combinational.
module bsc #(
  parameter int WIDTH = 12
) (
  input  logic signed [WIDTH-1:0] x,
  input  logic signed [WIDTH-1:0] r,
  output logic                    s
);
  assign s = (x > r);
endmodule
