// p_neuron: instantaneous activation unit of a digital modular p-neuron.
//
// The neuron compares its input string I_IN with the random word U_S from a
// (possibly shared) stochastic unit using a WIDTH-bit unsigned magnitude
// comparator: m_out = (I_IN > U_S). Averaged over time, P(m_out = 1) is the
// cumulative distribution of U_S at I_IN, so the activation function is set
// by the distribution of U_S, with no lookup table:
//   ACT_TANH, ACT_SIGMOID : U_S Gaussian-like, I_IN unsigned Q0.32 -> sigmoid;
//                            tanh is the same bit read as +1/-1.
//   ACT_LINEAR            : U_S uniform, I_IN unsigned Q0.32 -> P = I_IN.
//   ACT_RELU              : U_S uniform, I_IN two's complement Q1.31. A
//                            rectification multiplexer selected by I_IN[31]
//                            forces 0 for negative inputs; non-negative inputs
//                            are compared with U_S>>1 so that P = I_IN.
// The comparator and the I_IN[31]-selected rectification mux follow the
// published design. Dropping the LSB of U_S for ReLU, the strict '>' and the
// output register are this implementation's choices.
//
// Interface: clk, rst (synchronous, clears m_out), en (sample), i_in, u_s,
// m_out. m_out is registered: it shows the comparison of the cycle in which
// en was high from the next clock on.
module p_neuron
  import pneuron_pkg::*;
#(
  parameter act_t        ACT   = ACT_SIGMOID,
  parameter int unsigned WIDTH = DATA_W
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             en,
  input  logic [WIDTH-1:0] i_in,
  input  logic [WIDTH-1:0] u_s,
  output logic             m_out
);

  logic fire;

  always_comb begin
    unique case (ACT)
      ACT_RELU: begin
        // Rectification mux: input 0 is the comparator, input 1 a constant 0.
        if (i_in[WIDTH-1]) fire = 1'b0;
        else               fire = i_in > {1'b0, u_s[WIDTH-1:1]};
      end
      default:             fire = i_in > u_s;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst)     m_out <= 1'b0;
    else if (en) m_out <= fire;
  end

endmodule
