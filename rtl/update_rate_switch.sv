// update_rate_switch: update strobe of the p-neurons, set by the "circuit
// enable" and "clock frequency" switches of the experiment setup.
//
// tick is the clock enable of the stochastic unit and of every p-neuron.
// With circuit_en low it stays 0 and the whole p-neuron system is frozen.
// With freq_sel = 0 it is high on every clock; with freq_sel = 1 it is high
// on one clock in 2^DIV_LOG2, from a free-running divider. Using a clock
// enable rather than a second clock, and the divide ratio, are this
// implementation's choices.
//
// Interface: clk, rst (synchronous, clears the divider), circuit_en,
// freq_sel, tick (combinational from the divider register and the inputs).
module update_rate_switch #(
  parameter int unsigned DIV_LOG2 = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic circuit_en,
  input  logic freq_sel,
  output logic tick
);

  logic [DIV_LOG2-1:0] div;

  always_ff @(posedge clk) begin
    if (rst)             div <= '0;
    else if (circuit_en) div <= div + 1'b1;
  end

  assign tick = circuit_en && (!freq_sel || div == '1);

endmodule
