// tb_update_rate_switch: self-checking test of the update strobe.
// Checks: no tick while the circuit is disabled, a tick every clock in fast
// mode, and exactly one tick per 2^DIV_LOG2 clocks, evenly spaced, in slow
// mode.
module tb_update_rate_switch;
  logic clk = 0, rst, circuit_en, freq_sel, tick;
  int checks = 0, failures = 0;

  update_rate_switch #(.DIV_LOG2(4)) dut (.clk(clk), .rst(rst), .circuit_en(circuit_en),
                                          .freq_sel(freq_sel), .tick(tick));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, last, gap_ok;
    rst = 1; circuit_en = 0; freq_sel = 0;
    @(posedge clk); #1;
    rst = 0;
    n = 0;
    for (int t = 0; t < 200; t++) begin @(posedge clk); #1; n += tick; end
    check(n == 0, "no tick while disabled");
    circuit_en = 1; n = 0;
    for (int t = 0; t < 200; t++) begin #1; n += tick; @(posedge clk); end
    check(n == 200, $sformatf("fast mode: %0d ticks in 200", n));
    freq_sel = 1; n = 0; last = -1; gap_ok = 1;
    for (int t = 0; t < 1600; t++) begin
      #1;
      if (tick) begin
        if (last >= 0 && t - last != 16) gap_ok = 0;
        last = t; n++;
      end
      @(posedge clk);
    end
    check(n == 100, $sformatf("slow mode: %0d ticks in 1600", n));
    check(gap_ok == 1, "slow mode ticks every 16 clocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
