// pneuron_pkg: types and constants shared by the modular p-neuron RTL.
//
// A modular p-neuron keeps its randomness source (the stochastic unit) apart
// from its input path: the neuron is only a comparator between the input word
// I_IN and a random word U_S. The shape of the time-averaged activation
// function follows from the probability distribution of U_S, so one shared
// stochastic unit can serve neurons with different activation functions.
//
// The 32-bit word width and the four activation kinds come from the published
// design; the weight width is this implementation's own choice.
package pneuron_pkg;

  // Width of the random words and of the neuron input strings.
  localparam int unsigned DATA_W = 32;

  // Feedback taps of the 32-bit LFSR: stages 32, 22, 2 and 1
  // (polynomial x^32 + x^22 + x^2 + x + 1, maximal length). Bit k of the
  // mask is stage k+1.
  localparam logic [DATA_W-1:0] LFSR32_TAPS = 32'h8020_0003;

  // Activation kind of a digital p-neuron.
  //  ACT_TANH    : Gaussian U_S, output read as bipolar (+1/-1)
  //  ACT_SIGMOID : Gaussian U_S, output read as unipolar (1/0)
  //  ACT_RELU    : uniform U_S, two's-complement input, rectified, unipolar
  //  ACT_LINEAR  : uniform U_S, output read as bipolar
  typedef enum logic [1:0] {
    ACT_TANH    = 2'd0,
    ACT_SIGMOID = 2'd1,
    ACT_RELU    = 2'd2,
    ACT_LINEAR  = 2'd3
  } act_t;

  // Boltzmann-machine weights and biases of the p-AND network.
  localparam int unsigned WEIGHT_W = 8;
  typedef logic signed [WEIGHT_W-1:0] weight_t;

endpackage
