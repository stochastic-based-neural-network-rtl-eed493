// sc_vs_top_hw12_tb: end-to-end test of the smallest network size of the
// paper's hardware table, built as a parameter setting of the same RTL:
// 72 copies of the [24]-12-6-1 network, 12-bit SC, 4096-cycle windows,
// 3 batches. See sc_vs_top_tb_body.svh for the model and the checks.
module sc_vs_top_hw12_tb;
  localparam int NC = 72, NU = 24, NH1 = 12, NH2 = 6, E = 12, NB = 3;
`include "sc_vs_top_tb_body.svh"

  sc_vs_top #(.N_COPIES(NC), .N_U(NU), .N_H1(NH1), .N_H2(NH2), .EVAL_LOG2(E)) dut (
    .clk, .rst_n, .u, .in_valid, .in_ready, .w1, .w2, .w3, .y, .out_valid);

  initial begin : watchdog
    repeat ((NB + 6) * W) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
