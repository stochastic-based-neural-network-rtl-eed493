// sc_pkg: constants, types and helpers shared by the stochastic-computing
// (SC) neural-network accelerator.
//
// Numbers are SC_BITS-bit two's complement fractions of 2^(SC_BITS-1), i.e.
// the bipolar range [-1, 1). A binary value X becomes a bit-stream by
// x(t) = (X > R(t)) with R(t) a signed pseudo-random number; the stream's
// bipolar mean (ones - zeros)/N equals X / 2^(SC_BITS-1).
//
// Default sizes follow the paper's main hardware model "Hw 48": 24 input
// descriptors (12 per compound), hidden layers of 48 and 24 ReLU neurons, one
// output neuron, 12-bit SC and 12 network copies in parallel. The evaluation
// window of 2^12 cycles, the LFSR polynomials and the normalisation rule are
// this design's own choices.
package sc_pkg;

  localparam int SC_BITS   = 12;   // SC resolution (paper: 12-bit SC)
  localparam int EVAL_LOG2 = 12;   // window N = 2^EVAL_LOG2 clock cycles
  localparam int N_U       = 24;   // 2 compounds x 12 MPE descriptors
  localparam int N_H1      = 48;   // first hidden layer
  localparam int N_H2      = 24;   // second hidden layer
  localparam int N_COPIES  = 12;   // networks in parallel (Hw 48)

  // Maximal-length Fibonacci LFSR tap masks (bit i set = state bit i fed back)
  // LFSR1: x^12 + x^11 + x^10 + x^4 + 1  -> bits 11,10,9,3
  // LFSR2: x^12 + x^6  + x^4  + x   + 1  -> bits 11,5,3,0
  localparam logic [11:0] LFSR1_TAPS = 12'hE08;
  localparam logic [11:0] LFSR2_TAPS = 12'h829;
  localparam logic [11:0] LFSR1_SEED = 12'h001;
  localparam logic [11:0] LFSR2_SEED = 12'hACE;

  typedef logic signed [SC_BITS-1:0] sc_word_t;

  // Width of an APC accumulator for n inputs over a 2^eval_log2 window:
  // |sum| <= n * 2^eval_log2, plus a sign bit.
  function automatic int apc_width(int n, int eval_log2);
    return $clog2(n * (2 ** eval_log2) + 1) + 1;
  endfunction

endpackage
