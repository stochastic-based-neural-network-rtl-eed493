// apc: accumulative parallel counter with output register.
//
// Every clock it adds (number of ones - number of zeros) among its N_IN
// stochastic input bits to a signed accumulator, so over a window of N cycles
// it forms the sum of the N_IN bipolar values times N. In the last cycle of
// the window (win_last) the total, including that cycle, is stored in q and
// the accumulator restarts from zero on the next cycle.
//
// With N_IN = 1 it is the signed up/down counter plus register that turns one
// stream back into a binary number. acc is the running count including the
// current cycle's bits (combinational), q the registered window total.
//
// The counting rule follows the paper; the widths and the clear-on-window
// scheme are this design's own.
module apc #(
  parameter int N_IN  = 49,
  parameter int ACC_W = 19
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_IN-1:0]         bits,
  input  logic                    win_last,
  output logic signed [ACC_W-1:0] acc,
  output logic signed [ACC_W-1:0] q
);

  localparam int PW = $clog2(N_IN + 1);

  logic [PW-1:0]          ones;
  logic signed [ACC_W-1:0] inc;
  logic signed [ACC_W-1:0] acc_q;

  always_comb begin
    ones = '0;
    for (int i = 0; i < N_IN; i++) ones += PW'(bits[i]);
    inc = ACC_W'(2 * int'(ones) - N_IN);
    acc = acc_q + inc;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q <= '0;
      q     <= '0;
    end else if (win_last) begin
      acc_q <= '0;
      q     <= acc;
    end else begin
      acc_q <= acc;
    end
  end

endmodule
