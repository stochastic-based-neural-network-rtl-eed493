// bsc_array: N binary-to-stochastic converters sharing one random number.
//
// Element i outputs s[i] = (x[i] > r). Sharing r makes the N streams fully
// correlated with each other, which the design accepts: streams are only
// multiplied with streams from the other random source. Used for the
// compound descriptors (with R_x) and for all weights (with R_w).
// Combinational.
module bsc_array #(
  parameter int N     = 24,
  parameter int WIDTH = 12
) (
  input  logic signed [WIDTH-1:0] x [N],
  input  logic signed [WIDTH-1:0] r,
  output logic        [N-1:0]     s
);
  for (genvar i = 0; i < N; i++) begin : g_bsc
    bsc #(.WIDTH(WIDTH)) u_bsc (.x(x[i]), .r(r), .s(s[i]));
  end
endmodule
