// sc_layer: one layer of stochastic neurons.
//
// N_NEURONS sc_neuron instances share the layer's input streams x, the
// random number R_x(t), zero(t) and the window strobe. Each neuron has its own
// N_IN+1 weight streams; the extra input is a constant-one stream (bipolar
// +1), so the last weight of each neuron acts as its bias. The bias input is
// this design's own choice, inferred from the paper's synapse counts.
//
// Outputs: a, the neurons' output streams (ReLU when RELU = 1), and value,
// their registered normalised pre-activations (updated one cycle after
// win_last and held for the next window).
module sc_layer
#(
  parameter int N_IN       = sc_pkg::N_U,
  parameter int N_NEURONS  = sc_pkg::N_H1,
  parameter int SC_BITS    = sc_pkg::SC_BITS,
  parameter int EVAL_LOG2  = sc_pkg::EVAL_LOG2,
  parameter int NORM_SHIFT = 0,
  parameter bit RELU       = 1'b1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_IN-1:0]           x,
  input  logic [N_IN:0]             w [N_NEURONS],
  input  logic signed [SC_BITS-1:0] rx,
  input  logic                      zero_s,
  input  logic                      win_last,
  output logic [N_NEURONS-1:0]      a,
  output logic signed [SC_BITS-1:0] value [N_NEURONS]
);

  logic [N_IN:0] xb;
  assign xb = {1'b1, x};   // bias input is a constant bipolar +1

  for (genvar i = 0; i < N_NEURONS; i++) begin : g_n
    sc_neuron #(
      .N_IN(N_IN + 1), .SC_BITS(SC_BITS), .EVAL_LOG2(EVAL_LOG2),
      .NORM_SHIFT(NORM_SHIFT), .RELU(RELU)
    ) u_neuron (
      .clk, .rst_n, .x(xb), .w(w[i]), .rx, .zero_s, .win_last,
      .a(a[i]), .value(value[i])
    );
  end

endmodule
