// lfsr_tb: checks both LFSR configurations of the accelerator.
// The expected sequence is stepped from the polynomial exponents (not from
// the tap mask), the period must be exactly 2^12-1 with every non-zero value
// visited once, the state must hold when en is low, and reset must reload
// the seed.
module lfsr_tb;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [11:0] r1, r2;
  int checks = 0, failures = 0;

  lfsr #(.WIDTH(12), .TAPS(sc_pkg::LFSR1_TAPS), .SEED(sc_pkg::LFSR1_SEED)) d1 (.clk, .rst_n, .en, .r(r1));
  lfsr #(.WIDTH(12), .TAPS(sc_pkg::LFSR2_TAPS), .SEED(sc_pkg::LFSR2_SEED)) d2 (.clk, .rst_n, .en, .r(r2));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // next state from exponent list: x^12+x^11+x^10+x^4+1 / x^12+x^6+x^4+x+1
  function automatic logic [11:0] step(logic [11:0] s, int which);
    logic fb;
    if (which == 1) fb = s[12-1] ^ s[11-1] ^ s[10-1] ^ s[4-1];
    else            fb = s[12-1] ^ s[6-1]  ^ s[4-1]  ^ s[1-1];
    return {s[10:0], fb};
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  logic [11:0] m1, m2;
  bit seen1 [4096];
  int period1, period2;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; @(negedge clk);
    chk(r1 == 12'h001 && r2 == 12'hACE, "reset seed");
    m1 = r1; m2 = r2;
    // hold when disabled
    repeat (3) @(posedge clk); @(negedge clk);
    chk(r1 == m1 && r2 == m2, "hold with en=0");
    en = 1; period1 = 0; period2 = 0;
    for (int k = 1; k <= 4095; k++) begin
      @(posedge clk); @(negedge clk);
      m1 = step(m1, 1); m2 = step(m2, 2);
      chk(r1 == m1, $sformatf("lfsr1 step %0d: %h vs %h", k, r1, m1));
      chk(r2 == m2, $sformatf("lfsr2 step %0d", k));
      chk(r1 != 0, "lfsr1 non-zero");
      chk(!seen1[r1], "lfsr1 value repeated before period");
      seen1[r1] = 1;
      if (period1 == 0 && r1 == 12'h001) period1 = k;
      if (period2 == 0 && r2 == 12'hACE) period2 = k;
    end
    chk(period1 == 4095, $sformatf("lfsr1 period %0d", period1));
    chk(period2 == 4095, $sformatf("lfsr2 period %0d", period2));
    // the two sequences must differ (decorrelation of R_x and R_w)
    chk(r1 != r2, "lfsr1 and lfsr2 differ");
    rst_n = 0; @(posedge clk); @(negedge clk);
    chk(r1 == 12'h001, "re-reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
