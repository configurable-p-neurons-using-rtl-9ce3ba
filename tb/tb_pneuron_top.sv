// tb_pneuron_top: end-to-end test of the digital p-neuron system at its
// default (full) size.
// 1. Activation functions: for several inputs each of the four p-neurons is
//    sampled 20000 times and its firing rate compared with the cumulative
//    distribution of its random word, worked out here: the triangular
//    (Irwin-Hall) CDF for p-Tanh/p-Sigmoid, P = x for p-Linear and
//    P = max(0, x) for p-ReLU (two's complement input).
// 2. The two p-bit counters are checked exactly against counts made here.
// 3. The p-AND network is run free, forward (A, B clamped) and in reverse
//    (C clamped to 1).
// 4. Slow clock-frequency mode, circuit disable and counter clear.
// Each mechanism is counted and a failure is counted for any that never
// happened.
module tb_pneuron_top;
  logic              clk = 0, rst, circuit_en, freq_sel, cnt_clr;
  logic [3:0][31:0]  i_in;
  logic [2:0]        clamp_en, clamp_val, m_and;
  logic [1:0][2:0]   cnt_sel;
  logic [3:0]        m_act;
  logic [1:0]        and_upd_idx;
  logic [1:0][31:0]  cnt_ones, cnt_samples;
  int checks = 0, failures = 0;
  int n_rectify = 0, n_forward = 0, n_reverse = 0, n_free_valid = 0, n_slow = 0,
      n_disabled = 0, n_clear = 0, n_fire [4];

  pneuron_top dut (
    .clk(clk), .rst(rst), .circuit_en(circuit_en), .freq_sel(freq_sel), .i_in(i_in),
    .clamp_en(clamp_en), .clamp_val(clamp_val), .cnt_sel(cnt_sel), .cnt_clr(cnt_clr),
    .m_act(m_act), .m_and(m_and), .and_upd_idx(and_upd_idx),
    .cnt_ones(cnt_ones), .cnt_samples(cnt_samples));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real tri_cdf(real x);
    if (x <= 0.0) return 0.0;
    if (x >= 1.0) return 1.0;
    if (x < 0.5)  return 2.0 * x * x;
    return 1.0 - 2.0 * (1.0 - x) * (1.0 - x);
  endfunction

  function automatic logic [31:0] uq(real x);   // unsigned Q0.32
    return 32'(longint'(x * 4294967296.0));
  endfunction
  function automatic logic [31:0] sq(real x);   // two's complement Q1.31
    return 32'(longint'(x * 2147483648.0));
  endfunction

  task automatic clear_counters();
    cnt_clr = 1;
    @(posedge clk); #1;
    cnt_clr = 0;
    if (cnt_ones[0] == 0 && cnt_samples[0] == 0 && cnt_ones[1] == 0 && cnt_samples[1] == 0) n_clear++;
    check(cnt_samples[0] == 0 && cnt_samples[1] == 0, "counter clear");
  endtask

  localparam int NS = 20000;

  initial begin
    real xs [5] = '{0.1, 0.3, 0.5, 0.7, 0.9};
    real rs [5] = '{-0.8, -0.3, 0.2, 0.5, 0.9};
    int  ones [4];
    int  cnt_model [4];   // what the counters see: the outputs just before each clock edge
    int  hist [8];
    rst = 1; circuit_en = 0; freq_sel = 0; cnt_clr = 0;
    i_in = '0; clamp_en = 0; clamp_val = 0; cnt_sel = '{3'd1, 3'd0};
    foreach (n_fire[i]) n_fire[i] = 0;
    repeat (2) @(posedge clk); #1;
    rst = 0; circuit_en = 1;

    // 1 + 2: activation functions
    for (int p = 0; p < 5; p++) begin
      real pr [4];
      real expv [4];
      i_in[0] = uq(xs[p]); i_in[1] = uq(xs[p]); i_in[2] = sq(rs[p]); i_in[3] = uq(xs[p]);
      cnt_sel[0] = 3'(p % 4); cnt_sel[1] = 3'((p + 2) % 4);
      @(posedge clk); #1;     // let the new inputs be sampled once
      clear_counters();
      foreach (ones[n]) begin ones[n] = 0; cnt_model[n] = 0; end
      for (int t = 0; t < NS; t++) begin
        foreach (cnt_model[n]) cnt_model[n] += m_act[n];
        @(posedge clk); #1;
        foreach (ones[n]) begin ones[n] += m_act[n]; n_fire[n] += m_act[n]; end
        if (i_in[2][31]) n_rectify++;
      end
      expv[0] = tri_cdf(xs[p]); expv[1] = tri_cdf(xs[p]);
      expv[2] = rs[p] > 0.0 ? rs[p] : 0.0; expv[3] = xs[p];
      foreach (pr[n]) begin
        pr[n] = real'(ones[n]) / NS;
        check(pr[n] > expv[n] - 0.03 && pr[n] < expv[n] + 0.03,
              $sformatf("neuron %0d input %0d: rate %f expected %f", n, p, pr[n], expv[n]));
      end
      $display("x=%4.2f  tanh<m>=%6.3f sigmoid=%5.3f (exp %5.3f) | r=%5.2f relu=%5.3f | linear=%5.3f",
               xs[p], 2.0 * pr[0] - 1.0, pr[1], expv[1], rs[p], pr[2], pr[3]);
      check(cnt_samples[0] == NS && cnt_samples[1] == NS, "counter sample count");
      check(cnt_ones[0] == cnt_model[p % 4], $sformatf("counter 1 %0d vs %0d", cnt_ones[0], cnt_model[p % 4]));
      check(cnt_ones[1] == cnt_model[(p + 2) % 4], "counter 2 ones");
    end

    // 3a: p-AND free running, observed through the counters too
    cnt_sel[0] = 3'd6; cnt_sel[1] = 3'd4;
    clear_counters();
    foreach (hist[i]) hist[i] = 0;
    for (int t = 0; t < 60000; t++) begin
      @(posedge clk); #1;
      if (and_upd_idx == 0) begin
        hist[m_and]++;
        if (m_and[2] == (m_and[0] & m_and[1])) n_free_valid++;
      end
    end
    $display("p-AND free run (A,B,C=000,100,010,110,001,101,011,111): %0d %0d %0d %0d %0d %0d %0d %0d",
             hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7]);
    check(real'(n_free_valid) / 20000.0 > 0.9, "free-running p-AND stays in AND states");
    check(hist[0] > 2000 && hist[1] > 2000 && hist[2] > 2000 && hist[7] > 2000, "all four AND states visited");
    // C = 1 only with A = 1: P(C) and P(A) from the counters
    check(cnt_ones[0] < cnt_ones[1], "counters: P(C=1) < P(A=1)");

    // 3b: forward mode
    for (int ab = 0; ab < 4; ab++) begin
      int ok;
      clamp_en = 3'b011; clamp_val = {1'b0, 2'(ab)};
      ok = 0;
      repeat (30) @(posedge clk);
      #1;
      for (int t = 0; t < 3000; t++) begin
        @(posedge clk); #1;
        if (m_and[2] == ((ab & 1) & (ab >> 1))) ok++;
      end
      check(ok > 2700, $sformatf("forward A,B=%0d: C correct %0d/3000", ab, ok));
      if (ok > 2700) n_forward++;
    end

    // 3c: reverse mode
    begin
      int ok;
      clamp_en = 3'b100; clamp_val = 3'b100; ok = 0;
      repeat (30) @(posedge clk);
      #1;
      for (int t = 0; t < 6000; t++) begin
        @(posedge clk); #1;
        if (m_and == 3'b111) ok++;
      end
      $display("reverse: A=B=1 in %0d/6000", ok);
      check(ok > 5400, "reverse mode infers A=B=1");
      if (ok > 5400) n_reverse++;
      clamp_en = 0;
    end

    // 4: slow mode, disable
    freq_sel = 1; cnt_sel[0] = 3'd3;
    clear_counters();
    repeat (1600) @(posedge clk);
    #1;
    check(cnt_samples[0] >= 99 && cnt_samples[0] <= 101,
          $sformatf("slow mode: %0d updates in 1600 clocks", cnt_samples[0]));
    if (cnt_samples[0] >= 99 && cnt_samples[0] <= 101) n_slow++;
    freq_sel = 0; circuit_en = 0;
    begin
      logic [31:0] s0; logic [3:0] ma; logic [2:0] mn;
      @(posedge clk); #1;
      s0 = cnt_samples[0]; ma = m_act; mn = m_and;
      repeat (100) @(posedge clk);
      #1;
      check(cnt_samples[0] == s0 && m_act == ma && m_and == mn, "circuit disabled freezes the system");
      if (cnt_samples[0] == s0) n_disabled++;
    end

    $display("mechanisms: rectify=%0d forward=%0d reverse=%0d free_valid=%0d slow=%0d disabled=%0d clear=%0d fire=%0d/%0d/%0d/%0d",
             n_rectify, n_forward, n_reverse, n_free_valid, n_slow, n_disabled, n_clear,
             n_fire[0], n_fire[1], n_fire[2], n_fire[3]);
    check(n_rectify > 0, "rectification happened");
    check(n_forward == 4, "forward mode happened");
    check(n_reverse > 0, "reverse mode happened");
    check(n_free_valid > 0, "free-running p-AND happened");
    check(n_slow > 0, "slow update mode happened");
    check(n_disabled > 0, "circuit disable happened");
    check(n_clear > 0, "counter clear happened");
    foreach (n_fire[n]) check(n_fire[n] > 0, "every neuron fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
