// sc_neuron: one stochastic neuron with ReLU.
//
// Datapath, as in the paper's neuron: N_IN XNOR gates multiply the input
// streams x(t) with the weight streams w(t) (bipolar product; x and w come
// from different random sources, so they are uncorrelated). An APC counts the
// products over one evaluation window of 2^EVAL_LOG2 cycles. At the window
// end the total is normalised to SC_BITS bits and registered (value). During
// the next window a comparator turns value back into a stream
// s(t) = (value > R_x(t)) and an OR gate with zero(t) = (0 > R_x(t)) gives
// a(t). Because s and zero use the same R_x, they are fully correlated and the
// OR computes max(value, 0), i.e. the ReLU. With RELU = 0 the OR is left out.
//
// Normalisation (this design's own rule): the window total C is in units of
// one bipolar product per cycle, so the fixed-point pre-activation is
// C * 2^(SC_BITS-1) / 2^EVAL_LOG2. The neuron shifts C right arithmetically
// by EVAL_LOG2 - SC_BITS + 1 + NORM_SHIFT and saturates to the SC_BITS range;
// NORM_SHIFT lets a layer's weights be trained for a 2^NORM_SHIFT down-scaled
// output. value changes one cycle after win_last.
module sc_neuron
#(
  parameter int N_IN       = 25,
  parameter int SC_BITS    = sc_pkg::SC_BITS,
  parameter int EVAL_LOG2  = sc_pkg::EVAL_LOG2,
  parameter int NORM_SHIFT = 0,
  parameter bit RELU       = 1'b1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_IN-1:0]           x,
  input  logic [N_IN-1:0]           w,
  input  logic signed [SC_BITS-1:0] rx,
  input  logic                      zero_s,
  input  logic                      win_last,
  output logic                      a,
  output logic signed [SC_BITS-1:0] value
);

  localparam int ACC_W = sc_pkg::apc_width(N_IN, EVAL_LOG2);
  localparam int SH    = EVAL_LOG2 - SC_BITS + 1 + NORM_SHIFT;
  localparam logic signed [ACC_W-1:0] VMAX = ACC_W'((2 ** (SC_BITS - 1)) - 1);
  localparam logic signed [ACC_W-1:0] VMIN = -ACC_W'(2 ** (SC_BITS - 1));

  logic [N_IN-1:0]          prod;
  logic signed [ACC_W-1:0]  acc, total, scaled;
  logic                     s;

  assign prod = ~(x ^ w);   // bipolar multiplication

  apc #(.N_IN(N_IN), .ACC_W(ACC_W)) u_apc (
    .clk, .rst_n, .bits(prod), .win_last, .acc, .q(total)
  );

  always_comb begin
    scaled = total >>> SH;
    if (scaled > VMAX)      value = VMAX[SC_BITS-1:0];
    else if (scaled < VMIN) value = VMIN[SC_BITS-1:0];
    else                    value = scaled[SC_BITS-1:0];
  end

  bsc #(.WIDTH(SC_BITS)) u_bsc (.x(value), .r(rx), .s);

  assign a = RELU ? (s | zero_s) : s;

  initial assert (SH >= 0) else $error("sc_neuron: EVAL_LOG2 must be >= SC_BITS-1");

endmodule
