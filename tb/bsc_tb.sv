// bsc_tb: binary-to-stochastic comparator.
// Replays the 4-bit example of the paper's multiplier and correlation figures
// (X = 0.000, Y = 0.100, R(t) = 0.010 1.010 1.110 0.110 1.001 0.111 1.000
// 0.011) and checks the printed x(t) and y(t) bit patterns and the XNOR of
// the two correlated streams (z = 1-|x-y| pattern). Then compares a 12-bit
// instance with an integer comparison over random operands.
module bsc_tb;
  int checks = 0, failures = 0;
  logic signed [3:0] X4, Y4, R4;
  logic x4, y4;
  logic signed [11:0] X12, R12;
  logic s12;

  bsc #(.WIDTH(4))  dx (.x(X4), .r(R4), .s(x4));
  bsc #(.WIDTH(4))  dy (.x(Y4), .r(R4), .s(y4));
  bsc #(.WIDTH(12)) d12 (.x(X12), .r(R12), .s(s12));

  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  logic [3:0] rseq [8] = '{4'b0010, 4'b1010, 4'b1110, 4'b0110, 4'b1001, 4'b0111, 4'b1000, 4'b0011};
  bit xexp [8] = '{0,1,1,0,1,0,1,0};
  bit yexp [8] = '{1,1,1,0,1,0,1,1};
  bit zexp [8] = '{0,1,1,1,1,1,1,0};

  initial begin
    X4 = 4'b0000; Y4 = 4'b0100;
    for (int t = 0; t < 8; t++) begin
      R4 = rseq[t]; #1;
      chk(x4 == xexp[t], $sformatf("fig x(t) t=%0d", t));
      chk(y4 == yexp[t], $sformatf("fig y(t) t=%0d", t));
      chk((~(x4 ^ y4)) == zexp[t], $sformatf("fig z(t) t=%0d", t));
    end
    for (int k = 0; k < 5000; k++) begin
      int xi, ri;
      xi = int'($urandom_range(0, 4095)) - 2048;
      ri = int'($urandom_range(0, 4095)) - 2048;
      if (k < 8) begin xi = (k < 4) ? 2047 : -2048; ri = xi + ((k % 2 != 0) ? 0 : ((k < 4) ? -1 : 1)); end
      X12 = 12'(xi); R12 = 12'(ri); #1;
      chk(s12 == (xi > ri), $sformatf("12b %0d > %0d", xi, ri));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
