// sc_vs_top: stochastic-computing neural-network accelerator for
// ligand-based virtual screening.
//
// Each inference scores how similar two compounds are from their 24
// molecular-pairing-energy descriptors (12 per compound). N_COPIES identical
// networks (sc_ffnn) run side by side on one batch of N_COPIES compound
// pairs. The whole chip uses only two random sources, as in the paper:
//   LFSR1 -> R_x(t): input descriptors, the zero(t) reference and the output
//            comparator of every neuron (full correlation, so one OR gate
//            makes the ReLU);
//   LFSR2 -> R_w(t): all weights (uncorrelated with R_x, so XNOR multiplies).
// Sharing one weight BSC array among all copies is this design's choice.
//
// Interface: weights w1/w2/w3 are binary SC_BITS-bit two's complement ports
// (bias last in each neuron's row) and must be held stable while the
// accelerator runs. A batch u is offered with in_valid and taken when
// in_ready is high; y (one score per copy) comes with a one-cycle out_valid
// pulse. Timing: a window is 2^EVAL_LOG2 cycles; a batch starts at the next
// window boundary and its y appears one cycle after the end of the third
// window (three layers, one window each). In steady state one batch is
// accepted per window.
module sc_vs_top
#(
  parameter int N_COPIES    = sc_pkg::N_COPIES,
  parameter int N_U         = sc_pkg::N_U,
  parameter int N_H1        = sc_pkg::N_H1,
  parameter int N_H2        = sc_pkg::N_H2,
  parameter int EVAL_LOG2   = sc_pkg::EVAL_LOG2,
  parameter int NORM_SHIFT1 = 0,
  parameter int NORM_SHIFT2 = 0,
  parameter int NORM_SHIFT3 = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  // compound-pair batch
  input  sc_pkg::sc_word_t u  [N_COPIES][N_U],
  input  logic     in_valid,
  output logic     in_ready,
  // weights, held stable
  input  sc_pkg::sc_word_t w1 [N_H1][N_U+1],
  input  sc_pkg::sc_word_t w2 [N_H2][N_H1+1],
  input  sc_pkg::sc_word_t w3 [N_H2+1],
  // scores
  output sc_pkg::sc_word_t y  [N_COPIES],
  output logic     out_valid
);

  sc_pkg::sc_word_t rx, rw;
  logic     zero_s;
  logic     capture, load, win_last;

  lfsr #(.WIDTH(sc_pkg::SC_BITS), .TAPS(sc_pkg::LFSR1_TAPS), .SEED(sc_pkg::LFSR1_SEED))
    u_lfsr1 (.clk, .rst_n, .en(1'b1), .r(rx));
  lfsr #(.WIDTH(sc_pkg::SC_BITS), .TAPS(sc_pkg::LFSR2_TAPS), .SEED(sc_pkg::LFSR2_SEED))
    u_lfsr2 (.clk, .rst_n, .en(1'b1), .r(rw));

  // zero(t): the bipolar 0 converted with R_x
  bsc #(.WIDTH(sc_pkg::SC_BITS)) u_zero_bsc (.x('0), .r(rx), .s(zero_s));

  sc_window_ctrl #(.EVAL_LOG2(EVAL_LOG2), .DEPTH(3)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .capture, .load, .win_last, .out_valid
  );

  // weight streams, shared by all copies
  logic [N_U:0]  w1s [N_H1];
  logic [N_H1:0] w2s [N_H2];
  logic [N_H2:0] w3s;

  for (genvar i = 0; i < N_H1; i++) begin : g_w1
    bsc_array #(.N(N_U + 1), .WIDTH(sc_pkg::SC_BITS)) u_bsc (.x(w1[i]), .r(rw), .s(w1s[i]));
  end
  for (genvar i = 0; i < N_H2; i++) begin : g_w2
    bsc_array #(.N(N_H1 + 1), .WIDTH(sc_pkg::SC_BITS)) u_bsc (.x(w2[i]), .r(rw), .s(w2s[i]));
  end
  bsc_array #(.N(N_H2 + 1), .WIDTH(sc_pkg::SC_BITS)) u_w3_bsc (.x(w3), .r(rw), .s(w3s));

  // input batch: pending register (filled on capture), active register
  // (filled at a window boundary, read by the first layer for one window)
  sc_pkg::sc_word_t u_pend [N_COPIES][N_U];
  sc_pkg::sc_word_t u_act  [N_COPIES][N_U];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u_pend <= '{default: '0};
      u_act  <= '{default: '0};
    end else begin
      if (capture) u_pend <= u;
      if (load)    u_act  <= u_pend;
    end
  end

  for (genvar c = 0; c < N_COPIES; c++) begin : g_copy
    sc_pkg::sc_word_t h1 [N_H1];
    sc_pkg::sc_word_t h2 [N_H2];
    sc_ffnn #(.N_U(N_U), .N_H1(N_H1), .N_H2(N_H2), .SC_BITS(sc_pkg::SC_BITS),
              .EVAL_LOG2(EVAL_LOG2), .NORM_SHIFT1(NORM_SHIFT1),
              .NORM_SHIFT2(NORM_SHIFT2), .NORM_SHIFT3(NORM_SHIFT3))
      u_net (.clk, .rst_n, .u(u_act[c]), .w1s, .w2s, .w3s, .rx, .zero_s,
             .win_last, .y(y[c]), .h1, .h2);
  end

endmodule
