// sc_ffnn_tb: one network copy at reduced size ([4]-3-2-1, 8-bit SC,
// 256-cycle windows) with random R_x and R_w.
// A cycle-level model, written from the neuron equations, predicts the
// registered values of both hidden layers and of y at every window end
// (bit-exact). A second, real-valued model of the same network
// (ReLU(sum w*x + b), clipped to [-1,1)) checks that the stochastic result
// approximates the intended arithmetic: mean |y - y_ideal| must stay small.
// The input changes every window, so the three layers work on three
// different inputs at once (pipelining).
module sc_ffnn_tb;
  localparam int NU = 4, H1 = 3, H2 = 2, B = 8, E = 8, W = 1 << E;
  localparam int ONE = 1 << (B - 1);
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic signed [B-1:0] u [NU];
  logic [NU:0] w1s [H1];
  logic [H1:0] w2s [H2];
  logic [H2:0] w3s;
  logic signed [B-1:0] rx;
  logic zero_s, win_last;
  logic signed [B-1:0] y;
  logic signed [B-1:0] h1 [H1];
  logic signed [B-1:0] h2 [H2];

  sc_ffnn #(.N_U(NU), .N_H1(H1), .N_H2(H2), .SC_BITS(B), .EVAL_LOG2(E)) dut (
    .clk, .rst_n, .u, .w1s, .w2s, .w3s, .rx, .zero_s, .win_last, .y, .h1, .h2);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (40 * W) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int sat(int c);
    int v; v = c >>> (E - B + 1);
    if (v > ONE - 1) v = ONE - 1;
    if (v < -ONE)    v = -ONE;
    return v;
  endfunction

  function automatic real clip(real v);
    if (v > 1.0 - 1.0 / ONE) return 1.0 - 1.0 / ONE;
    if (v < -1.0) return -1.0;
    return v;
  endfunction

  int W1 [H1][NU+1], W2 [H2][H1+1], W3 [H2+1];
  int U [NU];
  int m1 [H1], m2 [H2], my;
  real ideal [$];
  real err_sum = 0.0;
  int  err_n = 0, relu_clamps = 0;

  function automatic real ideal_net(int uu [NU]);
    real r1 [H1], r2 [H2], ro;
    for (int i = 0; i < H1; i++) begin
      r1[i] = real'(W1[i][NU]) / ONE;
      for (int j = 0; j < NU; j++) r1[i] += real'(W1[i][j]) * real'(uu[j]) / (ONE * ONE);
      r1[i] = clip(r1[i]); if (r1[i] < 0) r1[i] = 0;
    end
    for (int i = 0; i < H2; i++) begin
      r2[i] = real'(W2[i][H1]) / ONE;
      for (int j = 0; j < H1; j++) r2[i] += real'(W2[i][j]) / ONE * r1[j];
      r2[i] = clip(r2[i]); if (r2[i] < 0) r2[i] = 0;
    end
    ro = real'(W3[H2]) / ONE;
    for (int j = 0; j < H2; j++) ro += real'(W3[j]) / ONE * r2[j];
    return clip(ro);
  endfunction

  initial begin
    for (int i = 0; i < H1; i++) for (int j = 0; j <= NU; j++) W1[i][j] = $urandom_range(0, ONE) - ONE / 2;
    for (int i = 0; i < H2; i++) for (int j = 0; j <= H1; j++) W2[i][j] = $urandom_range(0, ONE) - ONE / 2;
    for (int j = 0; j <= H2; j++) W3[j] = $urandom_range(0, ONE) - ONE / 2;
    W3[H2] = ONE / 4;
    foreach (m1[i]) m1[i] = 0;
    foreach (m2[i]) m2[i] = 0;
    my = 0;
    foreach (u[j]) u[j] = '0;
    rx = '0; zero_s = 0; win_last = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int win = 0; win < 30; win++) begin
      int c1 [H1], c2 [H2], c3;
      for (int j = 0; j < NU; j++) begin U[j] = int'($urandom_range(0, 2 * ONE - 1)) - ONE; u[j] = B'(U[j]); end
      ideal.push_back(ideal_net(U));
      foreach (c1[i]) c1[i] = 0;
      foreach (c2[i]) c2[i] = 0;
      c3 = 0;
      for (int t = 0; t < W; t++) begin
        int r, rw;
        bit us [NU], a1 [H1], a2 [H2];
        r  = int'($urandom_range(0, 2 * ONE - 1)) - ONE;
        rw = int'($urandom_range(0, 2 * ONE - 1)) - ONE;
        rx = B'(r); zero_s = (0 > r); win_last = (t == W - 1);
        for (int i = 0; i < H1; i++) for (int j = 0; j <= NU; j++) w1s[i][j] = (W1[i][j] > rw);
        for (int i = 0; i < H2; i++) for (int j = 0; j <= H1; j++) w2s[i][j] = (W2[i][j] > rw);
        for (int j = 0; j <= H2; j++) w3s[j] = (W3[j] > rw);
        for (int j = 0; j < NU; j++) us[j] = (U[j] > r);
        for (int j = 0; j < H1; j++) a1[j] = (m1[j] > r) || (0 > r);
        for (int j = 0; j < H2; j++) a2[j] = (m2[j] > r) || (0 > r);
        for (int i = 0; i < H1; i++) begin
          for (int j = 0; j < NU; j++) c1[i] += (us[j] == (W1[i][j] > rw)) ? 1 : -1;
          c1[i] += (W1[i][NU] > rw) ? 1 : -1;
        end
        for (int i = 0; i < H2; i++) begin
          for (int j = 0; j < H1; j++) c2[i] += (a1[j] == (W2[i][j] > rw)) ? 1 : -1;
          c2[i] += (W2[i][H1] > rw) ? 1 : -1;
        end
        for (int j = 0; j < H2; j++) c3 += (a2[j] == (W3[j] > rw)) ? 1 : -1;
        c3 += (W3[H2] > rw) ? 1 : -1;
        @(negedge clk);
      end
      for (int i = 0; i < H1; i++) begin m1[i] = sat(c1[i]); if (m1[i] < 0) relu_clamps++; end
      for (int i = 0; i < H2; i++) begin m2[i] = sat(c2[i]); if (m2[i] < 0) relu_clamps++; end
      my = sat(c3);
      for (int i = 0; i < H1; i++) chk(h1[i] == B'(m1[i]), $sformatf("h1[%0d] win %0d: %0d vs %0d", i, win, h1[i], m1[i]));
      for (int i = 0; i < H2; i++) chk(h2[i] == B'(m2[i]), $sformatf("h2[%0d] win %0d", i, win));
      chk(y == B'(my), $sformatf("y win %0d: %0d vs %0d", win, y, my));
      if (win >= 2) begin
        real yi;
        yi = ideal.pop_front();
        err_sum += (real'(my) / ONE > yi) ? real'(my) / ONE - yi : yi - real'(my) / ONE;
        err_n++;
      end
    end
    $display("mean |y - y_ideal| = %f over %0d inferences, relu clamps %0d", err_sum / err_n, err_n, relu_clamps);
    chk(err_sum / err_n < 0.15, "stochastic result approximates the real-valued network");
    chk(relu_clamps > 0, "ReLU clamp exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
