// lfsr32: Fibonacci linear-feedback shift register, the uniform
// pseudo-random source of the digital stochastic unit.
//
// Every clock with en high the register shifts one place towards the MSB
// (stage 1 -> stage 32) and the XOR of the tap stages enters stage 1 (bit 0).
// The whole register is read in parallel as a WIDTH-bit random word, so the
// word is uniform over the 2^WIDTH-1 non-zero values over one period.
// The 32-bit length and the tap stages 32, 22, 2, 1 are those of the
// published design; the XOR gate type, shift direction, seed and the
// synchronous reset are this implementation's choices.
//
// Interface: clk, rst (synchronous, active high, loads SEED), en (advance),
// q (current state). q changes one clock after en is sampled high.
module lfsr32
  import pneuron_pkg::*;
#(
  parameter int unsigned       WIDTH = DATA_W,
  parameter logic [WIDTH-1:0]  TAPS  = LFSR32_TAPS,
  parameter logic [WIDTH-1:0]  SEED  = 32'h0000_0001
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             en,
  output logic [WIDTH-1:0] q
);

  if (SEED == '0) begin : g_bad_seed
    $error("lfsr32: SEED must be non-zero");
  end

  logic feedback;
  assign feedback = ^(q & TAPS);

  always_ff @(posedge clk) begin
    if (rst)     q <= SEED;
    else if (en) q <= {q[WIDTH-2:0], feedback};
  end

  // An XOR LFSR never reaches the all-zero state from a non-zero seed.
  a_never_zero: assert property (@(posedge clk) disable iff (rst) q != '0);

endmodule
