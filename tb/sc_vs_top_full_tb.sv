// sc_vs_top_full_tb: end-to-end test of the accelerator at its default size:
// 12 copies of the [24]-48-24-1 network, 12-bit SC, 4096-cycle windows,
// 3 batches of 12 compound pairs. See sc_vs_top_tb_body.svh.
module sc_vs_top_full_tb;
  localparam int NC = sc_pkg::N_COPIES, NU = sc_pkg::N_U, NH1 = sc_pkg::N_H1,
                 NH2 = sc_pkg::N_H2, E = sc_pkg::EVAL_LOG2, NB = 3;
`include "sc_vs_top_tb_body.svh"

  sc_vs_top dut (.clk, .rst_n, .u, .in_valid, .in_ready, .w1, .w2, .w3, .y, .out_valid);

  initial begin : watchdog
    repeat ((NB + 6) * W) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
