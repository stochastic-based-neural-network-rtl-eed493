// sc_ffnn: one stochastic feed-forward network [N_U]-N_H1-N_H2-1.
//
// The binary descriptors u of two compounds (registered outside, held for a
// whole window) are turned into streams by a BSC array driven by R_x(t). Two
// ReLU layers and one output neuron follow. Every layer works on the streams
// of the previous layer's registered values, so the three layers form a
// pipeline one evaluation window per stage: an input held during window k
// gives hidden-layer-1 values after window k, hidden-layer-2 values after
// k+1 and the output y after k+2. The output neuron has no ReLU and no
// output comparator: its normalised window total is the binary y_out, the
// similarity score.
//
// Weight streams are inputs so that one weight BSC array (on R_w) can serve
// several network copies. Weight layout: w1s[i][j] is input j of hidden-1
// neuron i, index N_U is the bias; likewise w2s, and w3s for the output.
// h1 and h2 expose the registered hidden values for observation.
module sc_ffnn
#(
  parameter int N_U         = sc_pkg::N_U,
  parameter int N_H1        = sc_pkg::N_H1,
  parameter int N_H2        = sc_pkg::N_H2,
  parameter int SC_BITS     = sc_pkg::SC_BITS,
  parameter int EVAL_LOG2   = sc_pkg::EVAL_LOG2,
  parameter int NORM_SHIFT1 = 0,
  parameter int NORM_SHIFT2 = 0,
  parameter int NORM_SHIFT3 = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [SC_BITS-1:0] u   [N_U],
  input  logic [N_U:0]              w1s [N_H1],
  input  logic [N_H1:0]             w2s [N_H2],
  input  logic [N_H2:0]             w3s,
  input  logic signed [SC_BITS-1:0] rx,
  input  logic                      zero_s,
  input  logic                      win_last,
  output logic signed [SC_BITS-1:0] y,
  output logic signed [SC_BITS-1:0] h1 [N_H1],
  output logic signed [SC_BITS-1:0] h2 [N_H2]
);

  logic [N_U-1:0]  us;
  logic [N_H1-1:0] a1;
  logic [N_H2-1:0] a2;
  logic [0:0]      a3;
  logic [N_H2:0]   w3a [1];
  logic signed [SC_BITS-1:0] yv [1];

  assign w3a[0] = w3s;
  assign y      = yv[0];

  bsc_array #(.N(N_U), .WIDTH(SC_BITS)) u_in_bsc (.x(u), .r(rx), .s(us));

  sc_layer #(.N_IN(N_U), .N_NEURONS(N_H1), .SC_BITS(SC_BITS),
             .EVAL_LOG2(EVAL_LOG2), .NORM_SHIFT(NORM_SHIFT1), .RELU(1'b1))
    u_hidden1 (.clk, .rst_n, .x(us), .w(w1s), .rx, .zero_s, .win_last,
               .a(a1), .value(h1));

  sc_layer #(.N_IN(N_H1), .N_NEURONS(N_H2), .SC_BITS(SC_BITS),
             .EVAL_LOG2(EVAL_LOG2), .NORM_SHIFT(NORM_SHIFT2), .RELU(1'b1))
    u_hidden2 (.clk, .rst_n, .x(a1), .w(w2s), .rx, .zero_s, .win_last,
               .a(a2), .value(h2));

  sc_layer #(.N_IN(N_H2), .N_NEURONS(1), .SC_BITS(SC_BITS),
             .EVAL_LOG2(EVAL_LOG2), .NORM_SHIFT(NORM_SHIFT3), .RELU(1'b0))
    u_output (.clk, .rst_n, .x(a2), .w(w3a), .rx, .zero_s, .win_last,
              .a(a3), .value(yv));

endmodule
