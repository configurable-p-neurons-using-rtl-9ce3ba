// tb_lfsr32: self-checking test of the 32-bit LFSR.
// A reference model written from the feedback polynomial x^32+x^22+x^2+x+1
// predicts every state; the test also checks reset, hold when en is low,
// that no state repeats in the first 200000 steps and that each bit is 1
// about half of the time.
module tb_lfsr32;
  logic clk = 0, rst, en;
  logic [31:0] q;
  int checks = 0, failures = 0;

  lfsr32 #(.SEED(32'h1234_5678)) dut (.clk(clk), .rst(rst), .en(en), .q(q));

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model, first;
    int ones [32];
    bit repeated;
    rst = 1; en = 0;
    @(posedge clk); @(posedge clk); #1;
    check(q == 32'h1234_5678, "reset loads seed");
    rst = 0;
    @(posedge clk); #1;
    check(q == 32'h1234_5678, "hold while en low");
    en = 1;
    model = q; first = q; repeated = 0;
    foreach (ones[b]) ones[b] = 0;
    for (int t = 0; t < 200000; t++) begin
      @(posedge clk); #1;
      model = ref_next(model);
      if (t < 5000 || t % 97 == 0) check(q == model, $sformatf("step %0d q=%h model=%h", t, q, model));
      if (q == first) repeated = 1;
      for (int b = 0; b < 32; b++) ones[b] += q[b];
    end
    check(!repeated, "no repeat within 200000 steps");
    for (int b = 0; b < 32; b++)
      check(ones[b] > 98000 && ones[b] < 102000, $sformatf("bit %0d balance %0d", b, ones[b]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
