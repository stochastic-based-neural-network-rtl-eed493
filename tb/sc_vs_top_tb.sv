// sc_vs_top_tb: end-to-end test of the accelerator at reduced size:
// 3 copies of a [6]-5-4-1 network, 2048-cycle windows, 6 batches.
// See sc_vs_top_tb_body.svh for the model and the checks.
module sc_vs_top_tb;
  localparam int NC = 3, NU = 6, NH1 = 5, NH2 = 4, E = 11, NB = 6;
`include "sc_vs_top_tb_body.svh"

  sc_vs_top #(.N_COPIES(NC), .N_U(NU), .N_H1(NH1), .N_H2(NH2), .EVAL_LOG2(E)) dut (
    .clk, .rst_n, .u, .in_valid, .in_ready, .w1, .w2, .w3, .y, .out_valid);

  initial begin : watchdog
    repeat ((NB + 6) * W) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
