// Shared body of the end-to-end testbenches of sc_vs_top.
// The including module defines NC, NU, NH1, NH2, E (window log2), NB (number
// of batches) and instantiates the DUT on the signals declared here.
//
// The model is written from the design description, not from the RTL: its
// own LFSRs stepped from the polynomial exponents, comparators, XNOR
// products, counts, shift-and-saturate, OR-ReLU, a one-entry pending input
// register and a three-window layer pipeline. It predicts in_ready and
// out_valid every cycle and every copy's y at each out_valid, bit-exactly.
// Mechanisms that must occur at least once: back-pressure (in_valid while
// in_ready is low), bubble windows (a window end with no batch waiting),
// layers overlapping on different batches, ReLU clamping, saturation in the
// normalisation, and outputs.

  localparam int B   = sc_pkg::SC_BITS;
  localparam int ONE = 1 << (B - 1);
  localparam int W   = 1 << E;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  sc_pkg::sc_word_t u  [NC][NU];
  logic             in_valid, in_ready;
  sc_pkg::sc_word_t w1 [NH1][NU+1];
  sc_pkg::sc_word_t w2 [NH2][NH1+1];
  sc_pkg::sc_word_t w3 [NH2+1];
  sc_pkg::sc_word_t y  [NC];
  logic             out_valid;

  always #4 clk = ~clk;   // 125 MHz

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

  function automatic int s12(logic [11:0] v);
    return int'(signed'(v));
  endfunction

  // model state
  logic [11:0] l1, l2;
  int W1 [NH1][NU+1], W2 [NH2][NH1+1], W3 [NH2+1];
  int U [NB][NC][NU];
  int pend_b, act_b;          // batch index in pending / active register, -1 = none
  int vb [3];                 // batch held by input, layer-1 and layer-2 stage
  int h1m [NC][NH1], h2m [NC][NH2], ym [NC];
  int c1 [NC][NH1], c2 [NC][NH2], c3 [NC];
  int cnt, ov_m, ov_batch;
  int sent, received;
  int backpressure = 0, bubbles = 0, overlap = 0, relu_clamps = 0, sats = 0;
  int first_capture = -1, first_out = -1;

  initial begin : main
    int cyc;
    // weights: small random values; hidden-1 neuron 0 gets a large bias and
    // large weights so that it saturates for some inputs
    for (int i = 0; i < NH1; i++) for (int j = 0; j <= NU; j++) W1[i][j] = int'($urandom_range(0, ONE / 2)) - ONE / 4;
    for (int j = 0; j <= NU; j++) W1[0][j] = (j % 2) ? ONE - 1 : ONE / 2;
    for (int i = 0; i < NH2; i++) for (int j = 0; j <= NH1; j++) W2[i][j] = int'($urandom_range(0, ONE / 2)) - ONE / 4;
    for (int j = 0; j <= NH2; j++) W3[j] = int'($urandom_range(0, ONE / 2)) - ONE / 4;
    for (int i = 0; i < NH1; i++) for (int j = 0; j <= NU; j++) w1[i][j] = B'(W1[i][j]);
    for (int i = 0; i < NH2; i++) for (int j = 0; j <= NH1; j++) w2[i][j] = B'(W2[i][j]);
    for (int j = 0; j <= NH2; j++) w3[j] = B'(W3[j]);
    for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++) for (int j = 0; j < NU; j++)
      U[b][c][j] = int'($urandom_range(0, 2 * ONE - 1)) - ONE;
    foreach (u[c, j]) u[c][j] = '0;
    in_valid = 0;
    l1 = sc_pkg::LFSR1_SEED; l2 = sc_pkg::LFSR2_SEED;
    pend_b = -1; act_b = -1; vb = '{-1, -1, -1};
    foreach (h1m[c, i]) begin h1m[c][i] = 0; c1[c][i] = 0; end
    foreach (h2m[c, i]) begin h2m[c][i] = 0; c2[c][i] = 0; end
    foreach (ym[c]) begin ym[c] = 0; c3[c] = 0; end
    cnt = 0; ov_m = 0; ov_batch = -1; sent = 0; received = 0;

    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    for (cyc = 0; received < NB && cyc < (NB + 4) * W + 10; cyc++) begin
      int r, rw;
      bit wl, cap;
      bit wb1 [NH1][NU+1];
      bit wb2 [NH2][NH1+1];
      bit wb3 [NH2+1];
      // stimulus: offer batches back to back, but hold off during the
      // second window after the first batch so a bubble appears
      in_valid = (sent < NB) && !((cyc / W) == 2 && NB > 2);
      if (sent < NB) foreach (u[c, j]) u[c][j] = B'(U[sent][c][j]);
      #1;
      // outputs of the previous edge
      chk(in_ready == (pend_b < 0), $sformatf("in_ready cyc %0d", cyc));
      chk(out_valid == ov_m, $sformatf("out_valid cyc %0d", cyc));
      if (out_valid) begin
        if (first_out < 0) first_out = cyc;
        for (int c = 0; c < NC; c++) chk(y[c] == B'(ym[c]), $sformatf("y[%0d] batch %0d: %0d vs %0d", c, ov_batch, y[c], ym[c]));
        chk(ov_batch == received, "batches leave in order");
        received++;
      end
      if (in_valid && !in_ready) backpressure++;
      // model of this clock edge
      r = s12(l1); rw = s12(l2);
      wl = (cnt == W - 1);
      cap = in_valid && (pend_b < 0);
      for (int i = 0; i < NH1; i++) for (int j = 0; j <= NU; j++) wb1[i][j] = (W1[i][j] > rw);
      for (int i = 0; i < NH2; i++) for (int j = 0; j <= NH1; j++) wb2[i][j] = (W2[i][j] > rw);
      for (int j = 0; j <= NH2; j++) wb3[j] = (W3[j] > rw);
      for (int c = 0; c < NC; c++) begin
        bit us [NU];
        bit a1 [NH1];
        bit a2 [NH2];
        for (int j = 0; j < NU; j++)  us[j] = ((act_b >= 0 ? U[act_b][c][j] : 0) > r);
        for (int j = 0; j < NH1; j++) a1[j] = (h1m[c][j] > r) || (0 > r);
        for (int j = 0; j < NH2; j++) a2[j] = (h2m[c][j] > r) || (0 > r);
        for (int i = 0; i < NH1; i++) begin
          int s; s = wb1[i][NU] ? 1 : -1;
          for (int j = 0; j < NU; j++) s += (us[j] == wb1[i][j]) ? 1 : -1;
          c1[c][i] += s;
        end
        for (int i = 0; i < NH2; i++) begin
          int s; s = wb2[i][NH1] ? 1 : -1;
          for (int j = 0; j < NH1; j++) s += (a1[j] == wb2[i][j]) ? 1 : -1;
          c2[c][i] += s;
        end
        begin
          int s; s = wb3[NH2] ? 1 : -1;
          for (int j = 0; j < NH2; j++) s += (a2[j] == wb3[j]) ? 1 : -1;
          c3[c] += s;
        end
      end
      ov_m = 0;
      if (wl) begin
        int nvalid;
        nvalid = (vb[0] >= 0) + (vb[1] >= 0) + (vb[2] >= 0);
        if (nvalid >= 2) overlap++;
        for (int c = 0; c < NC; c++) begin
          for (int i = 0; i < NH1; i++) begin
            h1m[c][i] = sat(c1[c][i]);
            if (vb[0] >= 0 && h1m[c][i] < 0) relu_clamps++;
            if (vb[0] >= 0 && h1m[c][i] != (c1[c][i] >>> (E - B + 1))) sats++;
            c1[c][i] = 0;
          end
          for (int i = 0; i < NH2; i++) begin
            h2m[c][i] = sat(c2[c][i]);
            if (vb[1] >= 0 && h2m[c][i] < 0) relu_clamps++;
            if (vb[1] >= 0 && h2m[c][i] != (c2[c][i] >>> (E - B + 1))) sats++;
            c2[c][i] = 0;
          end
          ym[c] = sat(c3[c]); c3[c] = 0;
        end
        ov_m = (vb[2] >= 0); ov_batch = vb[2];
        vb[2] = vb[1]; vb[1] = vb[0]; vb[0] = pend_b;
        if (pend_b < 0) bubbles++;
        act_b = (pend_b >= 0) ? pend_b : act_b;
        pend_b = -1;
      end
      if (cap) begin
        pend_b = sent; sent++;
        if (first_capture < 0) first_capture = cyc;
      end
      cnt = (cnt + 1) % W;
      l1 = {l1[10:0], l1[11] ^ l1[10] ^ l1[9] ^ l1[3]};   // x^12+x^11+x^10+x^4+1
      l2 = {l2[10:0], l2[11] ^ l2[5] ^ l2[3] ^ l2[0]};    // x^12+x^6+x^4+x+1
      @(negedge clk);
    end
    $display("batches %0d sent, %0d received; first capture cycle %0d, first output cycle %0d",
             sent, received, first_capture, first_out);
    $display("mechanisms: backpressure=%0d bubbles=%0d overlapping_windows=%0d relu_clamps=%0d saturations=%0d",
             backpressure, bubbles, overlap, relu_clamps, sats);
    chk(received == NB, "all batches produced outputs");
    // latency: captured in cycle 0 of window 0, loaded at its end, output one
    // cycle after the end of the third following window
    chk(first_out - first_capture == 4 * W, $sformatf("first-result latency %0d cycles", first_out - first_capture));
    chk(backpressure > 0, "back-pressure happened");
    chk(bubbles > 0, "bubble window happened");
    chk(overlap > 0, "layers overlapped on different batches");
    chk(relu_clamps > 0, "ReLU clamp happened");
    chk(sats > 0, "saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
