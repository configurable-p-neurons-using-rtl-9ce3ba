// tb_stochastic_unit: self-checking test of the shared stochastic unit.
// Two reference LFSRs predict both random words exactly; the test then checks
// the distributions: the Gaussian-like word must be centred on 2^31 with
// about 75% of its samples in the middle half of the range (triangular
// distribution), the uniform word about 50%.
module tb_stochastic_unit;
  logic clk = 0, rst, en;
  logic [31:0] u_gauss, u_unif;
  int checks = 0, failures = 0;

  localparam logic [31:0] SA = 32'h0000_0001, SB = 32'hACE1_2461;
  stochastic_unit #(.SEED_A(SA), .SEED_B(SB)) dut (
    .clk(clk), .rst(rst), .en(en), .u_gauss(u_gauss), .u_unif(u_unif));

  always #5 clk = ~clk;

  function automatic logic [31:0] ref_next(logic [31:0] s);
    return {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a, b, eg;
    longint unsigned sum_g;
    int mid_g, mid_u;
    localparam int NS = 200000;
    rst = 1; en = 0;
    @(posedge clk); #1;
    rst = 0; en = 1;
    a = SA; b = SB; sum_g = 0; mid_g = 0; mid_u = 0;
    for (int t = 0; t < NS; t++) begin
      eg = {1'b0, a[31:1]} + {1'b0, b[31:1]};
      if (t < 3000 || t % 53 == 0) begin
        check(u_gauss == eg, $sformatf("t=%0d gauss %h exp %h", t, u_gauss, eg));
        check(u_unif == b, $sformatf("t=%0d unif %h exp %h", t, u_unif, b));
      end
      sum_g += u_gauss;
      if (u_gauss >= 32'h4000_0000 && u_gauss < 32'hC000_0000) mid_g++;
      if (u_unif  >= 32'h4000_0000 && u_unif  < 32'hC000_0000) mid_u++;
      @(posedge clk); #1;
      a = ref_next(a); b = ref_next(b);
    end
    $display("mean(gauss)/2^32=%f mid_g=%f mid_u=%f", real'(sum_g) / NS / 4294967296.0,
             real'(mid_g) / NS, real'(mid_u) / NS);
    check(real'(sum_g) / NS / 4294967296.0 > 0.49 && real'(sum_g) / NS / 4294967296.0 < 0.51, "gauss mean");
    check(real'(mid_g) / NS > 0.73 && real'(mid_g) / NS < 0.77, "gauss concentration");
    check(real'(mid_u) / NS > 0.48 && real'(mid_u) / NS < 0.52, "uniform spread");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
