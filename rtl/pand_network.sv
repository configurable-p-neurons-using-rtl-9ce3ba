// pand_network: probabilistic AND gate built from three p-Sigmoid p-neurons
// in a fully connected Boltzmann machine that share one stochastic unit.
//
// Neurons A, B, C (bits 0, 1, 2 of m) hold bipolar spins s = +1 for bit 1 and
// -1 for bit 0. On each enabled step one neuron is updated, in the order
// A, B, C, A, ... Its synaptic input is
//     I_k = H[k] + sum_j J[k][j] * s_j
// which is mapped onto the unsigned 32-bit input string of a p-Sigmoid neuron
// as I_IN = 2^31 + I_k * BETA, saturated to [0, 2^32-1]; the neuron
// compares it with the shared Gaussian random word. With the default weights
// the network settles with equal probability into the four states where
// C = A AND B (CBA = 000, 010, 100, 111 read as A,B,C = 000, 010, 100, 111).
// A neuron whose clamp_en bit is set is held at clamp_val instead of being
// updated: clamping A and B runs the gate forward, clamping C runs it in
// reverse.
// The three neurons, their weights and biases and the A, B, C update order
// follow the published design. The spin convention, the input scaling
// (BETA, i.e. the inverse temperature) and the clamp mechanism are this
// implementation's choices.
//
// Interface: clk, rst (synchronous: all neurons 0, next update A), en (one
// update step), u_s (Gaussian random word), clamp_en, clamp_val, m (states),
// upd_idx (neuron updated by the next step). m reflects a step one clock later.
module pand_network
  import pneuron_pkg::*;
#(
  parameter int unsigned WIDTH      = DATA_W,
  parameter int unsigned N          = 3,
  parameter int unsigned BETA       = 32'h3000_0000,
  parameter weight_t     J [N][N]   = '{'{ 8'sd0, -8'sd1,  8'sd2},
                                        '{-8'sd1,  8'sd0,  8'sd2},
                                        '{ 8'sd2,  8'sd2,  8'sd0}},
  parameter weight_t     H [N]      = '{8'sd1, 8'sd1, -8'sd2}
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic [WIDTH-1:0]     u_s,
  input  logic [N-1:0]         clamp_en,
  input  logic [N-1:0]         clamp_val,
  output logic [N-1:0]         m,
  output logic [$clog2(N)-1:0] upd_idx
);

  localparam int unsigned IDX_W = $clog2(N);
  localparam int unsigned SUM_W = 16;
  localparam int unsigned EXT_W = WIDTH + SUM_W + 2;

  logic [N-1:0]                       m_free;   // p-neuron outputs
  logic signed [SUM_W-1:0]            i_syn;    // synaptic input of upd_idx
  logic signed [EXT_W-1:0]            i_ext;
  logic [WIDTH-1:0]                   i_in;

  // Synapse: weighted sum of the bipolar spins for the neuron being updated.
  always_comb begin
    i_syn = SUM_W'(H[upd_idx]);
    for (int j = 0; j < N; j++) begin
      if (m[j]) i_syn = i_syn + SUM_W'(J[upd_idx][j]);
      else      i_syn = i_syn - SUM_W'(J[upd_idx][j]);
    end
  end

  // Map the signed sum onto the unsigned input string, centred on 2^(WIDTH-1).
  always_comb begin
    i_ext = EXT_W'(i_syn) * $signed(EXT_W'(BETA)) + (EXT_W'(1) <<< (WIDTH - 1));
    if (i_ext < 0)                                i_in = '0;
    else if (i_ext > EXT_W'({WIDTH{1'b1}}))       i_in = '1;
    else                                          i_in = i_ext[WIDTH-1:0];
  end

  for (genvar k = 0; k < N; k++) begin : g_neuron
    p_neuron #(.ACT(ACT_SIGMOID), .WIDTH(WIDTH)) u_neuron (
      .clk   (clk),
      .rst   (rst),
      .en    (en && (upd_idx == IDX_W'(k)) && !clamp_en[k]),
      .i_in  (i_in),
      .u_s   (u_s),
      .m_out (m_free[k])
    );
  end

  assign m = (clamp_en & clamp_val) | (~clamp_en & m_free);

  // Sequential update order A, B, C, A, ...
  always_ff @(posedge clk) begin
    if (rst)                               upd_idx <= '0;
    else if (en && upd_idx == IDX_W'(N-1)) upd_idx <= '0;
    else if (en)                           upd_idx <= upd_idx + 1'b1;
  end

  a_idx_range: assert property (@(posedge clk) disable iff (rst) upd_idx < IDX_W'(N));

endmodule
