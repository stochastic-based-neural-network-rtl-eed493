// sc_window_ctrl_tb: window timing and handshake with 8-cycle windows.
// Checks win_last exactly every 8th cycle, in_ready/capture/load against a
// one-entry model, and that every captured batch produces exactly one
// out_valid, 3 windows + 1 cycle after the window end that loaded it, in
// order. Random in_valid makes both back-pressure (in_valid with in_ready
// low) and bubbles (window ends with nothing to load) happen.
module sc_window_ctrl_tb;
  localparam int E = 3, W = 1 << E, D = 3;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, capture, load, win_last, out_valid;

  sc_window_ctrl #(.EVAL_LOG2(E), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready,
    .capture, .load, .win_last, .out_valid);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  int cyc = 0;
  bit pend = 0;
  int due [$];            // cycles at which out_valid is expected
  int backpressure = 0, bubbles = 0, outputs = 0, loads = 0;

  initial begin
    in_valid = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (cyc = 0; cyc < 2000; cyc++) begin
      in_valid = ($urandom_range(0, 99) < ((cyc / 400) % 2 ? 3 : 40));
      #1;
      chk(win_last == ((cyc % W) == W - 1), $sformatf("win_last cyc %0d", cyc));
      chk(in_ready == !pend, "in_ready");
      chk(capture == (in_valid && !pend), "capture");
      chk(load == (win_last && pend), "load");
      chk(out_valid == (due.size() > 0 && due[0] == cyc), $sformatf("out_valid cyc %0d", cyc));
      if (out_valid) begin outputs++; if (due.size() > 0 && due[0] == cyc) void'(due.pop_front()); end
      if (in_valid && !in_ready) backpressure++;
      if (win_last && !pend) bubbles++;
      if (win_last && pend) begin due.push_back(cyc + D * W + 1); loads++; end
      pend = (pend && !win_last) || (in_valid && !pend);
      @(negedge clk);
    end
    $display("mechanisms: backpressure=%0d bubbles=%0d loads=%0d outputs=%0d", backpressure, bubbles, loads, outputs);
    chk(backpressure > 0 && bubbles > 0 && outputs > 10, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
