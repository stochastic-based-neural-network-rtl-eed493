// sc_neuron_tb: stochastic neuron with and without ReLU.
// Small sizes: 5 inputs, 6-bit SC, 64-cycle windows. Each window draws new
// per-input ones-probabilities so pre-activations range from strongly
// negative through saturated positive. An independent model counts the XNOR
// products, shifts and saturates the total, and then predicts every output
// bit of the next window: (v > R) | (0 > R) for ReLU, (v > R) without.
// Counts how often the ReLU clamped a negative value and how often the
// saturation acted; both must happen.
module sc_neuron_tb;
  localparam int N = 5, B = 6, E = 6, W = 1 << E;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  logic [N-1:0] x, w;
  logic signed [B-1:0] rx;
  logic zero_s, win_last;
  logic aR, aL;
  logic signed [B-1:0] vR, vL;

  sc_neuron #(.N_IN(N), .SC_BITS(B), .EVAL_LOG2(E), .NORM_SHIFT(0), .RELU(1'b1))
    dR (.clk, .rst_n, .x, .w, .rx, .zero_s, .win_last, .a(aR), .value(vR));
  sc_neuron #(.N_IN(N), .SC_BITS(B), .EVAL_LOG2(E), .NORM_SHIFT(1), .RELU(1'b0))
    dL (.clk, .rst_n, .x, .w, .rx, .zero_s, .win_last, .a(aL), .value(vL));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int sat(int c, int sh);
    int v; v = c >>> sh;
    if (v > (1 << (B-1)) - 1) v = (1 << (B-1)) - 1;
    if (v < -(1 << (B-1)))    v = -(1 << (B-1));
    return v;
  endfunction

  int mR = 0, mL = 0;        // model registered values
  int relu_clamps = 0, sats = 0, positives = 0;

  initial begin
    x = '0; w = '0; rx = '0; zero_s = 0; win_last = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int win = 0; win < 120; win++) begin
      int px [N], pw [N];
      int c;
      c = 0;
      for (int i = 0; i < N; i++) begin px[i] = $urandom_range(0, 100); pw[i] = $urandom_range(0, 100); end
      if (win % 6 == 0) for (int i = 0; i < N; i++) begin px[i] = 100; pw[i] = 100; end  // all products +1
      for (int t = 0; t < W; t++) begin
        int r;
        for (int i = 0; i < N; i++) begin
          x[i] = ($urandom_range(0, 99) < px[i]);
          w[i] = ($urandom_range(0, 99) < pw[i]);
        end
        r = int'($urandom_range(0, (1 << B) - 1)) - (1 << (B-1));
        rx = B'(r); zero_s = (0 > r); win_last = (t == W - 1);
        #1;
        chk(aR == ((mR > r) || (0 > r)), $sformatf("relu out win %0d t %0d", win, t));
        chk(aL == (mL > r), "linear out");
        for (int i = 0; i < N; i++) c += (x[i] == w[i]) ? 1 : -1;
        @(negedge clk);
      end
      mR = sat(c, E - B + 1);
      mL = sat(c, E - B + 2);
      chk(vR == B'(mR), $sformatf("value relu %0d vs %0d (c=%0d)", vR, mR, c));
      chk(vL == B'(mL), $sformatf("value lin %0d vs %0d", vL, mL));
      if (mR < 0) relu_clamps++;
      if (mR > 0) positives++;
      if ((c >>> (E - B + 1)) != mR) sats++;
    end
    $display("mechanisms: relu_clamps=%0d saturations=%0d positive=%0d", relu_clamps, sats, positives);
    chk(relu_clamps > 0, "ReLU clamp exercised");
    chk(sats > 0, "saturation exercised");
    chk(positives > 0, "positive pass-through exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
