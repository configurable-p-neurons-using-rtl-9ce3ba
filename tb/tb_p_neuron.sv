// tb_p_neuron: self-checking test of the four digital p-neuron kinds.
// Random and corner-case (i_in, u_s) pairs are applied to a tanh, a sigmoid,
// a ReLU and a linear neuron and each registered output is compared with a
// reference comparison written here (unsigned I_IN > U_S; for ReLU 0 when
// I_IN is negative, else I_IN > U_S/2). Reset and hold with en low are
// also checked.
module tb_p_neuron;
  import pneuron_pkg::*;
  logic clk = 0, rst, en;
  logic [31:0] i_in, u_s;
  logic [3:0] m;
  int checks = 0, failures = 0, relu_rect = 0;

  p_neuron #(.ACT(ACT_TANH))    d0 (.clk(clk), .rst(rst), .en(en), .i_in(i_in), .u_s(u_s), .m_out(m[0]));
  p_neuron #(.ACT(ACT_SIGMOID)) d1 (.clk(clk), .rst(rst), .en(en), .i_in(i_in), .u_s(u_s), .m_out(m[1]));
  p_neuron #(.ACT(ACT_RELU))    d2 (.clk(clk), .rst(rst), .en(en), .i_in(i_in), .u_s(u_s), .m_out(m[2]));
  p_neuron #(.ACT(ACT_LINEAR))  d3 (.clk(clk), .rst(rst), .en(en), .i_in(i_in), .u_s(u_s), .m_out(m[3]));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic [31:0] ii, logic [31:0] uu);
    bit e_cmp, e_relu;
    longint unsigned half;
    i_in = ii; u_s = uu; en = 1;
    @(posedge clk); #1;
    e_cmp = longint'(ii) > longint'(uu);
    half = longint'(uu) / 2;
    e_relu = ii[31] ? 1'b0 : (longint'(ii) > half);
    if (ii[31] && longint'(ii) > half) relu_rect++;
    check(m[0] == e_cmp, $sformatf("tanh i=%h u=%h", ii, uu));
    check(m[1] == e_cmp, $sformatf("sigmoid i=%h u=%h", ii, uu));
    check(m[3] == e_cmp, $sformatf("linear i=%h u=%h", ii, uu));
    check(m[2] == e_relu, $sformatf("relu i=%h u=%h got %b", ii, uu, m[2]));
  endtask

  initial begin
    rst = 1; en = 0; i_in = '1; u_s = '0;
    @(posedge clk); #1;
    check(m == 4'b0000, "reset clears outputs");
    rst = 0;
    @(posedge clk); #1;
    check(m == 4'b0000, "hold with en low");
    apply(32'h0000_0001, 32'h0000_0000);
    apply(32'h8000_0000, 32'h8000_0000);
    apply(32'h8000_0001, 32'h8000_0000);
    apply(32'hFFFF_FFFF, 32'h0000_0000);
    apply(32'h7FFF_FFFF, 32'hFFFF_FFFE);
    apply(32'h4000_0000, 32'h7FFF_FFFE);
    apply(32'h4000_0000, 32'h8000_0002);
    for (int t = 0; t < 20000; t++) apply($urandom, $urandom);
    for (int t = 0; t < 2000; t++) begin
      logic [31:0] r;
      r = $urandom;
      apply(r, r + 32'($urandom_range(0, 6)) - 32'd3);
    end
    // hold: en low, change inputs, outputs must not move
    begin
      logic [3:0] held;
      apply(32'hFFFF_FFF0, 32'h0000_0010);
      held = m; en = 0; i_in = 0; u_s = '1;
      @(posedge clk); #1;
      check(m == held, "outputs hold while en is low");
    end
    check(relu_rect > 0, "rectification exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
