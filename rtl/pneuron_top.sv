// pneuron_top: digital modular p-neuron system with one shared stochastic
// unit.
//
// A single stochastic unit (two LFSRs and an adder) produces a Gaussian-like
// and a uniform random word on every update tick. The Gaussian word drives a
// p-Tanh neuron, a p-Sigmoid neuron and the three p-Sigmoid neurons of a
// p-AND Boltzmann network; the uniform word drives a p-ReLU and a p-Linear
// neuron. Each neuron is only a comparator, so its activation function is
// chosen by which random word it is given. Two p-bit counters, each routed
// by cnt_sel to any of the seven neuron outputs, accumulate time averages.
// update_rate_switch turns the circuit-enable and clock-frequency switches
// into the update tick.
// Sharing one stochastic unit across neurons of different activation kinds,
// the four neuron kinds and the p-AND network follow the published design.
// The counter routing and the common update tick are this implementation's
// choices.
//
// Interface (all synchronous to clk, rst synchronous active high):
//   i_in[0..3]  input strings of the tanh, sigmoid, relu, linear neurons
//               (relu: two's complement Q1.31, others unsigned Q0.32)
//   m_act[0..3] their outputs; m_and[0..2] the p-AND states A, B, C;
//   and_upd_idx the p-AND neuron that the next tick updates
//   clamp_en/clamp_val  p-AND clamps (forward: A,B; reverse: C)
//   cnt_sel[c]  0..3 selects m_act, 4..6 selects m_and[0..2]
//   cnt_ones/cnt_samples  counter values; cnt_clr clears both counters
// Outputs change one clock after the tick that computed them.
module pneuron_top
  import pneuron_pkg::*;
#(
  parameter int unsigned WIDTH = DATA_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   circuit_en,
  input  logic                   freq_sel,
  input  logic [3:0][WIDTH-1:0]  i_in,
  input  logic [2:0]             clamp_en,
  input  logic [2:0]             clamp_val,
  input  logic [1:0][2:0]        cnt_sel,
  input  logic                   cnt_clr,
  output logic [3:0]             m_act,
  output logic [2:0]             m_and,
  output logic [1:0]             and_upd_idx,
  output logic [1:0][31:0]       cnt_ones,
  output logic [1:0][31:0]       cnt_samples
);

  localparam act_t ACTS [4] = '{ACT_TANH, ACT_SIGMOID, ACT_RELU, ACT_LINEAR};

  logic             tick;
  logic [WIDTH-1:0] u_gauss, u_unif;
  logic [6:0]       all_bits;

  update_rate_switch u_rate (
    .clk(clk), .rst(rst), .circuit_en(circuit_en), .freq_sel(freq_sel), .tick(tick)
  );

  stochastic_unit #(.WIDTH(WIDTH)) u_rng (
    .clk(clk), .rst(rst), .en(tick), .u_gauss(u_gauss), .u_unif(u_unif)
  );

  for (genvar n = 0; n < 4; n++) begin : g_act
    p_neuron #(.ACT(ACTS[n]), .WIDTH(WIDTH)) u_neuron (
      .clk   (clk),
      .rst   (rst),
      .en    (tick),
      .i_in  (i_in[n]),
      .u_s   ((ACTS[n] == ACT_TANH || ACTS[n] == ACT_SIGMOID) ? u_gauss : u_unif),
      .m_out (m_act[n])
    );
  end

  pand_network #(.WIDTH(WIDTH)) u_pand (
    .clk(clk), .rst(rst), .en(tick), .u_s(u_gauss),
    .clamp_en(clamp_en), .clamp_val(clamp_val), .m(m_and), .upd_idx(and_upd_idx)
  );

  assign all_bits = {m_and, m_act};

  for (genvar c = 0; c < 2; c++) begin : g_cnt
    logic src;
    assign src = (cnt_sel[c] < 3'd7) ? all_bits[cnt_sel[c]] : 1'b0;
    pbit_counter #(.CW(32)) u_cnt (
      .clk(clk), .rst(rst), .clr(cnt_clr), .sample(tick), .bit_in(src),
      .ones(cnt_ones[c]), .samples(cnt_samples[c])
    );
  end

endmodule
