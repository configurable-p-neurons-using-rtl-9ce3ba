// tb_pand_network: self-checking test of the 3-neuron p-AND Boltzmann network
// driven by the shared stochastic unit.
// 1. Every update is predicted exactly by a reference synapse written here
//    (I = h + sum J*s, I_IN = 2^31 + I*0x3000_0000 saturated, new bit = I_IN > U_S)
//    and the update order A, B, C is checked.
// 2. Free running: the states with C = A AND B must take at least 90% of the
//    samples and each of the four between 10% and 40%. (An ideal sampler
//    gives 24% each; the consecutive words of a parallel-read LFSR are
//    correlated, which skews the shares to about 30/21/14/33%.)
// 3. Forward mode (A, B clamped): C must follow A AND B in at least 90%.
// 4. Reverse mode (C clamped to 1): A = B = 1 in at least 90%.
module tb_pand_network;
  import pneuron_pkg::*;
  logic clk = 0, rst, en;
  logic [31:0] u_gauss, u_unif;
  logic [2:0] clamp_en, clamp_val, m;
  logic [1:0] upd_idx;
  int checks = 0, failures = 0;

  localparam int JW [3][3] = '{'{0, -1, 2}, '{-1, 0, 2}, '{2, 2, 0}};
  localparam int HW [3]    = '{1, 1, -2};

  stochastic_unit rng (.clk(clk), .rst(rst), .en(en), .u_gauss(u_gauss), .u_unif(u_unif));
  pand_network dut (.clk(clk), .rst(rst), .en(en), .u_s(u_gauss),
                    .clamp_en(clamp_en), .clamp_val(clamp_val), .m(m), .upd_idx(upd_idx));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ref_fire(logic [2:0] s, int k, logic [31:0] u);
    longint i_val, i_in;
    i_val = HW[k];
    for (int j = 0; j < 3; j++) i_val += s[j] ? JW[k][j] : -JW[k][j];
    i_in = 64'h8000_0000 + i_val * 64'h3000_0000;
    if (i_in < 0) i_in = 0;
    if (i_in > 64'hFFFF_FFFF) i_in = 64'hFFFF_FFFF;
    return i_in > longint'(u);
  endfunction

  // One update step; with check_exact the result is compared with the model.
  task automatic step(bit check_exact);
    logic [2:0] s, exp_m;
    int k;
    s = m; k = upd_idx;
    exp_m = s;
    exp_m[k] = clamp_en[k] ? clamp_val[k] : ref_fire(s, k, u_gauss);
    @(posedge clk); #1;
    if (check_exact) begin
      check(m == exp_m, $sformatf("step k=%0d s=%b u=%h m=%b exp=%b", k, s, u_gauss, m, exp_m));
      check(upd_idx == 2'((k + 1) % 3), "update order A,B,C");
    end
  endtask

  initial begin
    int hist [8];
    int good, total, fwd_ok, fwd_n, rev_ok, rev_n;
    rst = 1; en = 0; clamp_en = 0; clamp_val = 0;
    @(posedge clk); #1;
    check(m == 3'b000 && upd_idx == 0, "reset state");
    rst = 0; en = 1;
    // 1 + 2: free running, exact and statistical
    foreach (hist[i]) hist[i] = 0;
    total = 0;
    for (int t = 0; t < 150000; t++) begin
      step(t < 30000 || t % 7 == 0);
      if (upd_idx == 0) begin hist[m]++; total++; end
    end
    good = hist[0] + hist[1] + hist[2] + hist[7];
    $display("state histogram (CBA): %0d %0d %0d %0d %0d %0d %0d %0d of %0d",
             hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7], total);
    check(real'(good) / total > 0.90, "valid AND states dominate");
    foreach (hist[i])
      if (i[2] == (i[0] & i[1]))
        check(real'(hist[i]) / total > 0.10 && real'(hist[i]) / total < 0.40,
              $sformatf("state %b share", i));
    // 3: forward mode
    fwd_ok = 0; fwd_n = 0;
    for (int ab = 0; ab < 4; ab++) begin
      clamp_en = 3'b011; clamp_val = {1'b0, 2'(ab)}; #1;
      for (int t = 0; t < 3000; t++) begin
        step(t % 5 == 0);
        if (t > 30) begin fwd_n++; if (m[2] == (m[0] & m[1])) fwd_ok++; end
      end
      check(m[1:0] == 2'(ab), "forward clamps hold A,B");
    end
    $display("forward: %0d/%0d", fwd_ok, fwd_n);
    check(real'(fwd_ok) / fwd_n > 0.90, "forward mode computes AND");
    // 4: reverse mode
    clamp_en = 3'b100; clamp_val = 3'b100; rev_ok = 0; rev_n = 0; #1;
    for (int t = 0; t < 6000; t++) begin
      step(t % 5 == 0);
      if (t > 30) begin rev_n++; if (m == 3'b111) rev_ok++; end
    end
    $display("reverse: %0d/%0d", rev_ok, rev_n);
    check(real'(rev_ok) / rev_n > 0.90, "reverse mode infers A=B=1");
    // hold with en low
    begin
      logic [2:0] held; logic [1:0] hi;
      en = 0; held = m; hi = upd_idx;
      repeat (5) @(posedge clk); #1;
      check(m == held && upd_idx == hi, "hold while en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
