// stochastic_unit: shared digital random-number generator of the modular
// p-neurons.
//
// Two 32-bit LFSRs run side by side. Each word is shifted right by one bit and
// the two halves are added by a 32-bit adder: the sum of two uniform variables
// has the triangular Irwin-Hall distribution, an approximation of the normal
// distribution, centred on 2^31 and never overflowing. That word (u_gauss)
// gives sigmoid/tanh-shaped activation functions. The word of LFSR B alone
// (u_unif) is uniform and gives linear/ReLU-shaped activation functions.
// The two-LFSR structure, the shift-right-by-one and the 32-bit adder follow
// the published design; seeds, the unregistered adder and taking the uniform
// word from LFSR B unshifted are this implementation's choices.
//
// Interface: clk, rst (synchronous, loads the seeds), en (advance both
// LFSRs). u_gauss and u_unif are combinational functions of the LFSR
// registers and so change one clock after en.
module stochastic_unit
  import pneuron_pkg::*;
#(
  parameter int unsigned      WIDTH  = DATA_W,
  parameter logic [WIDTH-1:0] SEED_A = 32'h0000_0001,
  parameter logic [WIDTH-1:0] SEED_B = 32'hACE1_2461
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             en,
  output logic [WIDTH-1:0] u_gauss,
  output logic [WIDTH-1:0] u_unif
);

  logic [WIDTH-1:0] q_a, q_b;

  lfsr32 #(.WIDTH(WIDTH), .SEED(SEED_A)) u_lfsr_a (
    .clk(clk), .rst(rst), .en(en), .q(q_a)
  );
  lfsr32 #(.WIDTH(WIDTH), .SEED(SEED_B)) u_lfsr_b (
    .clk(clk), .rst(rst), .en(en), .q(q_b)
  );

  // Each operand is below 2^(WIDTH-1), so the WIDTH-bit sum cannot overflow.
  assign u_gauss = (q_a >> 1) + (q_b >> 1);
  assign u_unif  = q_b;

endmodule
