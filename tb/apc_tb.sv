// apc_tb: accumulative parallel counter.
// Part 1 replays the up/down counter of the paper's multiplier figure:
// z(t) = 0 0 1 0 1 1 1 0 over an 8-cycle window must give the printed
// running count Z = -1 -2 -1 -2 -1 0 1 0 and register Q = 0 at the end.
// Part 2 drives 7 random inputs over 32-cycle windows and compares every
// running count and window total with an independent sum.
module apc_tb;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic        b1, wl1;
  logic signed [4:0] acc1, q1;
  apc #(.N_IN(1), .ACC_W(5)) d1 (.clk, .rst_n, .bits(b1), .win_last(wl1), .acc(acc1), .q(q1));

  localparam int N7 = 7, W7 = 5;
  localparam int A7 = sc_pkg::apc_width(N7, W7);
  logic [N7-1:0] b7;
  logic          wl7;
  logic signed [A7-1:0] acc7, q7;
  apc #(.N_IN(N7), .ACC_W(A7)) d7 (.clk, .rst_n, .bits(b7), .win_last(wl7), .acc(acc7), .q(q7));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  bit zseq [8] = '{0,0,1,0,1,1,1,0};
  int zexp [8] = '{-1,-2,-1,-2,-1,0,1,0};

  initial begin
    b1 = 0; wl1 = 0; b7 = '0; wl7 = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // part 1
    for (int t = 0; t < 8; t++) begin
      b1 = zseq[t]; wl1 = (t == 7); #1;
      chk(acc1 == 5'(zexp[t]), $sformatf("Z t=%0d got %0d", t, acc1));
      @(posedge clk); #1;
    end
    wl1 = 0; #1;
    chk(q1 == 0, "Q after window");
    chk(acc1 == -1, "counter restarted");   // b1=0 now -> -1 from a cleared count
    // second window, all ones -> +8
    for (int t = 0; t < 8; t++) begin b1 = 1; wl1 = (t == 7); @(posedge clk); #1; end
    wl1 = 0;
    chk(q1 == 8, $sformatf("Q all ones %0d", q1));
    // part 2 (one window end first: d7 has been counting zeros so far)
    wl7 = 1; @(posedge clk); #1 wl7 = 0;
    for (int win = 0; win < 40; win++) begin
      int sum; sum = 0;
      for (int t = 0; t < 32; t++) begin
        b7 = N7'($urandom);
        if (win % 10 == 0) b7 = '1;          // extreme windows
        if (win % 10 == 1) b7 = '0;
        wl7 = (t == 31);
        sum += 2 * $countones(b7) - N7; #1;
        chk(acc7 == A7'(sum), "running count");
        @(posedge clk); #1;
      end
      wl7 = 0; #1;
      chk(q7 == A7'(sum), $sformatf("window total %0d vs %0d", q7, sum));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
