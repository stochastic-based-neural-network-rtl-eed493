// bsc_array_tb: 24 comparators sharing one random number; every output bit
// is compared with an integer comparison of its own element. Also checks the
// mean of one element's stream over all 4096 values of r (bipolar value
// must equal X / 2048 exactly when r sweeps the full range).
module bsc_array_tb;
  localparam int N = 24;
  int checks = 0, failures = 0;
  logic signed [11:0] x [N];
  logic signed [11:0] r;
  logic [N-1:0] s;

  bsc_array #(.N(N), .WIDTH(12)) dut (.x, .r, .s);

  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  int xi [N];
  initial begin
    for (int k = 0; k < 500; k++) begin
      int ri;
      for (int i = 0; i < N; i++) begin xi[i] = int'($urandom_range(0, 4095)) - 2048; x[i] = 12'(xi[i]); end
      ri = int'($urandom_range(0, 4095)) - 2048; r = 12'(ri); #1;
      for (int i = 0; i < N; i++) chk(s[i] == (xi[i] > ri), $sformatf("elem %0d", i));
    end
    // stream value over a full sweep of r
    for (int i = 0; i < N; i++) begin xi[i] = (i * 173) % 4096 - 2048; x[i] = 12'(xi[i]); end
    begin
      int cnt [N];
      for (int i = 0; i < N; i++) cnt[i] = 0;
      for (int ri = -2048; ri < 2048; ri++) begin
        r = 12'(ri); #1;
        for (int i = 0; i < N; i++) cnt[i] += s[i] ? 1 : -1;
      end
      for (int i = 0; i < N; i++) chk(cnt[i] == 2 * xi[i], $sformatf("sweep mean elem %0d: %0d", i, cnt[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
