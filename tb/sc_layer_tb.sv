// sc_layer_tb: a layer of 3 neurons with 4 inputs plus bias, 6-bit SC,
// 64-cycle windows. Each neuron gets its own weight streams; the model adds
// the bias product (constant +1 input times the bias stream) and checks all
// registered values and all output bits of the following window.
module sc_layer_tb;
  localparam int N = 4, M = 3, B = 6, E = 6, W = 1 << E;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic [N-1:0] x;
  logic [N:0]   w [M];
  logic signed [B-1:0] rx;
  logic zero_s, win_last;
  logic [M-1:0] a;
  logic signed [B-1:0] value [M];

  sc_layer #(.N_IN(N), .N_NEURONS(M), .SC_BITS(B), .EVAL_LOG2(E), .RELU(1'b1))
    dut (.clk, .rst_n, .x, .w, .rx, .zero_s, .win_last, .a, .value);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int sat(int c);
    int v; v = c >>> (E - B + 1);
    if (v > (1 << (B-1)) - 1) v = (1 << (B-1)) - 1;
    if (v < -(1 << (B-1)))    v = -(1 << (B-1));
    return v;
  endfunction

  int m [M] = '{0, 0, 0};
  int bias_only = 0;

  initial begin
    x = '0; rx = '0; zero_s = 0; win_last = 0;
    foreach (w[i]) w[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int win = 0; win < 60; win++) begin
      int c [M];
      int pb [M];
      foreach (c[i]) begin c[i] = 0; pb[i] = $urandom_range(0, 100); end
      for (int t = 0; t < W; t++) begin
        int r;
        x = N'($urandom);
        for (int i = 0; i < M; i++) begin
          w[i][N-1:0] = N'($urandom);
          w[i][N]     = ($urandom_range(0, 99) < pb[i]);   // bias stream
        end
        // every 5th window: inputs and weights cancel, only the bias counts
        if (win % 5 == 0) for (int i = 0; i < M; i++) w[i][N-1:0] = {x[3], ~x[2], x[1], ~x[0]};
        r = int'($urandom_range(0, (1 << B) - 1)) - (1 << (B-1));
        rx = B'(r); zero_s = (0 > r); win_last = (t == W - 1);
        #1;
        for (int i = 0; i < M; i++) begin
          chk(a[i] == ((m[i] > r) || (0 > r)), $sformatf("a[%0d] win %0d", i, win));
          for (int j = 0; j < N; j++) c[i] += (x[j] == w[i][j]) ? 1 : -1;
          c[i] += w[i][N] ? 1 : -1;          // bias: constant +1 input
        end
        @(negedge clk);
      end
      for (int i = 0; i < M; i++) begin
        m[i] = sat(c[i]);
        chk(value[i] == B'(m[i]), $sformatf("value[%0d] %0d vs %0d", i, value[i], m[i]));
      end
      if (win % 5 == 0) bias_only++;
    end
    chk(bias_only > 0, "bias-only windows exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
