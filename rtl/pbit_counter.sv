// pbit_counter: time-average counter for one p-bit output.
//
// While sample is high, samples counts the clock and ones counts it if
// bit_in is 1; ones/samples is the time-averaged output <m_OUT> of the p-bit.
// Both counters saturate at all-ones instead of wrapping, and clr (or rst)
// zeroes them. The experiment setup this follows shows two such p-bit
// counters; their binary form, saturation and width are this
// implementation's choices.
//
// Interface: clk, rst and clr (synchronous), sample, bit_in, ones, samples.
// The counts include a sample from the next clock on.
module pbit_counter #(
  parameter int unsigned CW = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          clr,
  input  logic          sample,
  input  logic          bit_in,
  output logic [CW-1:0] ones,
  output logic [CW-1:0] samples
);

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      ones    <= '0;
      samples <= '0;
    end else if (sample && samples != '1) begin
      samples <= samples + 1'b1;
      if (bit_in) ones <= ones + 1'b1;
    end
  end

  a_ones_le_samples: assert property (@(posedge clk) disable iff (rst) ones <= samples);

endmodule
