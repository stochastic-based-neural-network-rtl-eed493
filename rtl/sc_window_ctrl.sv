// sc_window_ctrl: evaluation-window timing and input/output handshake.
//
// A free-running counter divides time into windows of 2^EVAL_LOG2 cycles;
// win_last is high in the last cycle of each window, the cycle in which every
// APC stores its total (the "register enable at the end of the evaluation
// time"). One input batch can wait in a pending register: in_ready is high
// while it is empty and capture (= in_valid & in_ready) tells the datapath to
// store the batch there. At each window end load moves a waiting batch into
// the active register, which the first layer reads during the next window.
// A DEPTH-stage valid pipeline follows the batch through the layers; one
// cycle after the window end in which the last layer stored a result of a
// real batch, out_valid is high for one cycle together with the new output.
// Windows without a batch run anyway (bubbles) and give no out_valid.
//
// The whole handshake is this design's own; the paper gives only the
// window-end register enable.
module sc_window_ctrl #(
  parameter int EVAL_LOG2 = 12,
  parameter int DEPTH     = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  output logic capture,
  output logic load,
  output logic win_last,
  output logic out_valid
);

  logic [EVAL_LOG2-1:0] cnt;
  logic                 pend_full;
  logic [DEPTH-1:0]     v;   // v[0]: active input valid, v[k]: layer k holds valid data

  assign win_last = (cnt == '1);
  assign in_ready = !pend_full;
  assign capture  = in_valid && in_ready;
  assign load     = win_last && pend_full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      pend_full <= 1'b0;
      v         <= '0;
      out_valid <= 1'b0;
    end else begin
      cnt       <= cnt + 1'b1;
      pend_full <= (pend_full && !win_last) || capture;
      out_valid <= win_last && v[DEPTH-1];
      if (win_last) v <= {v[DEPTH-2:0], pend_full};
    end
  end

  // A capture never overwrites a waiting batch.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   capture |-> !pend_full);

  initial assert (DEPTH >= 2) else $error("sc_window_ctrl: DEPTH must be >= 2");

endmodule
