// lfsr: pseudo-random number generator of the SC datapath.
//
// A Fibonacci linear feedback shift register: every enabled clock the state
// shifts one place towards the MSB and the new LSB is the XOR of the state
// bits selected by TAPS. The state itself, read as a signed WIDTH-bit
// number, is the random number R(t) that the comparators (BSCs) use. With a
// maximal-length TAPS mask the sequence visits all 2^WIDTH-1 non-zero values.
//
// The accelerator uses two of these, as in the paper: LFSR1 gives R_x(t) for
// the inputs, the zero reference and every neuron's output; LFSR2 gives
// R_w(t) for the weights. Polynomials and seeds are this design's choice.
//
// Timing: r is the registered state; synchronous active-low reset to SEED.
module lfsr #(
  parameter int          WIDTH = 12,
  parameter logic [WIDTH-1:0] TAPS = 12'hE08,
  parameter logic [WIDTH-1:0] SEED = 12'h001
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  output logic signed [WIDTH-1:0] r
);

  logic [WIDTH-1:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= {state[WIDTH-2:0], ^(state & TAPS)};
  end

  assign r = state;

  initial assert (SEED != '0) else $error("lfsr: SEED must be non-zero");

endmodule
