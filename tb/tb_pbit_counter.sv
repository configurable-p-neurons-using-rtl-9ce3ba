// tb_pbit_counter: self-checking test of the p-bit time-average counter.
// Random bit and sample patterns are counted by a model here and compared with
// both counters; clear and saturation (small counter width) are checked.
module tb_pbit_counter;
  logic clk = 0, rst, clr, sample, bit_in;
  logic [31:0] ones, samples;
  logic [3:0] ones4, samples4;
  int checks = 0, failures = 0;

  pbit_counter dut (.clk(clk), .rst(rst), .clr(clr), .sample(sample), .bit_in(bit_in),
                    .ones(ones), .samples(samples));
  pbit_counter #(.CW(4)) sat (.clk(clk), .rst(rst), .clr(clr), .sample(sample), .bit_in(bit_in),
                              .ones(ones4), .samples(samples4));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_ones, n_samp;
    rst = 1; clr = 0; sample = 0; bit_in = 0;
    @(posedge clk); #1;
    rst = 0;
    check(ones == 0 && samples == 0, "reset");
    for (int round = 0; round < 3; round++) begin
      n_ones = 0; n_samp = 0;
      for (int t = 0; t < 5000; t++) begin
        sample = $urandom_range(0, 3) != 0;
        bit_in = $urandom_range(0, 2) == 0;
        if (sample) begin n_samp++; if (bit_in) n_ones++; end
        @(posedge clk); #1;
        if (t % 10 == 0) check(ones == n_ones && samples == n_samp,
                                $sformatf("count %0d/%0d exp %0d/%0d", ones, samples, n_ones, n_samp));
        check(samples4 == 4'(n_samp > 15 ? 15 : n_samp), "4-bit sample counter saturates");
      end
      check(ones4 <= samples4, "4-bit ones never exceed samples");
      sample = 0; clr = 1;
      @(posedge clk); #1;
      clr = 0;
      check(ones == 0 && samples == 0 && ones4 == 0 && samples4 == 0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
