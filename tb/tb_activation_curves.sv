// tb_activation_curves: activation-function sweeps of the four digital
// p-neurons, all sharing one stochastic unit, at full 32-bit size.
// Each neuron of pneuron_top is swept over 21 input points (unsigned inputs
// 0.0 .. 1.0 for p-Tanh, p-Sigmoid and p-Linear; two's complement -1.0 .. 1.0
// for p-ReLU) with 10000 updates per point. The measured firing rate is
// compared with the cumulative distribution of the random word each neuron
// is given, worked out here:
//   triangular (two-LFSR Irwin-Hall) CDF for p-Tanh and p-Sigmoid,
//   P = x for p-Linear, P = max(0, r) for p-ReLU,
// within +-0.03. The table printed is the time-averaged activation curve,
// bipolar (2P-1) for p-Tanh and p-Linear.
module tb_activation_curves;
  logic              clk = 0, rst, cnt_clr;
  logic [3:0][31:0]  i_in;
  logic [3:0]        m_act;
  logic [2:0]        m_and;
  logic [1:0]        and_upd_idx;
  logic [1:0][31:0]  cnt_ones, cnt_samples;
  int checks = 0, failures = 0;

  pneuron_top dut (
    .clk(clk), .rst(rst), .circuit_en(1'b1), .freq_sel(1'b0), .i_in(i_in),
    .clamp_en(3'b000), .clamp_val(3'b000), .cnt_sel('{3'd1, 3'd0}), .cnt_clr(cnt_clr),
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
    repeat (400000) @(posedge clk);
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

  function automatic logic [31:0] uq(real x);   // unsigned Q0.32, 1.0 -> all ones
    longint v;
    v = longint'(x * 4294967296.0);
    if (v > 64'sd4294967295) v = 64'sd4294967295;
    return 32'(v);
  endfunction
  function automatic logic [31:0] sq(real r);   // two's complement Q1.31, 1.0 -> max
    longint v;
    v = longint'(r * 2147483648.0);
    if (v > 64'sd2147483647) v = 64'sd2147483647;
    return 32'(v);
  endfunction

  localparam int NS = 10000;

  initial begin
    int ones [4];
    real x, r, pr [4], ex [4];
    rst = 1; cnt_clr = 0; i_in = '0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    $display("   x     tanh<m>  sigmoid   linear<m> |    r    relu");
    for (int p = 0; p <= 20; p++) begin
      x = p / 20.0;
      r = -1.0 + p / 10.0;
      i_in[0] = uq(x); i_in[1] = uq(x); i_in[2] = sq(r); i_in[3] = uq(x);
      @(posedge clk); #1;
      foreach (ones[n]) ones[n] = 0;
      for (int t = 0; t < NS; t++) begin
        @(posedge clk); #1;
        foreach (ones[n]) ones[n] += m_act[n];
      end
      ex[0] = tri_cdf(x); ex[1] = tri_cdf(x); ex[2] = r > 0.0 ? r : 0.0; ex[3] = x;
      foreach (pr[n]) begin
        pr[n] = real'(ones[n]) / NS;
        check(pr[n] > ex[n] - 0.03 && pr[n] < ex[n] + 0.03,
              $sformatf("neuron %0d point %0d: %f vs %f", n, p, pr[n], ex[n]));
      end
      $display("  %4.2f   %7.3f   %6.3f   %7.3f   | %5.2f  %6.3f",
               x, 2.0 * pr[0] - 1.0, pr[1], 2.0 * pr[3] - 1.0, r, pr[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
