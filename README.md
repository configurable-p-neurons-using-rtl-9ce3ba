# Modular digital p-neurons with a shared stochastic unit

A probabilistic bit (p-bit) is a neuron whose output is random but whose
time-averaged output follows a smooth function of its input. In the classic
p-bit, the input signal and the noise source act on the same node. The noise
and the input are then coupled, and a digital version needs a lookup table to
shape the response.

This design keeps the two paths apart. A **stochastic unit** produces a random
word `U_S`. An **activation unit** does nothing but compare the input word
`I_IN` with it:

    m_OUT = (I_IN > U_S)

The probability that the neuron fires is therefore `P(U_S < I_IN)`, the
cumulative distribution function (CDF) of `U_S`, evaluated at the input. The
activation function is chosen by choosing the distribution of the random word:

| random word | distribution | neuron output read as | time-averaged activation |
|---|---|---|---|
| sum of two LFSR halves | triangular (Irwin-Hall, close to normal) | 1/0 | p-Sigmoid |
| same | same | +1/-1 | p-Tanh |
| one LFSR | uniform | +1/-1 | p-Linear |
| one LFSR, input sign-rectified | uniform | 1/0 | p-ReLU |

No neuron holds any randomness of its own. One stochastic unit can therefore
serve many neurons, including neurons with different activation functions.
Each extra neuron costs only a 32-bit comparator and a flip-flop. That sharing
is where the hardware saving comes from: about an order of magnitude against a
LUT-based digital p-bit with its own random number generator.

The RTL here is the digital (FPGA-style) form of the idea. It contains:

* the shared stochastic unit;
* the four neuron kinds;
* a three-neuron probabilistic AND gate (p-AND) built as a Boltzmann machine
  on one shared generator;
* the counters and update-rate control of a bench setup.

The spintronic form, which uses stochastic magnetic tunnel junctions (sMTJs)
and analog comparators, is not RTL and is not included.

## Block diagram

```
                 circuit_en, freq_sel
                        |
               +--------v---------+  tick (clock enable of everything below)
               |update_rate_switch|-------------------------------+
               +------------------+                               |
                                                                  v
   +--------------------------- stochastic_unit --------------------------+
   |  lfsr32 A --(>>1)--+                                                  |
   |                    (+)----------------------------> u_gauss (triangular)
   |  lfsr32 B --(>>1)--+                                                  |
   |        \----------------------------------------> u_unif   (uniform) |
   +------------------------------------------------------------------------+
        u_gauss |             |                      u_unif |          |
   p_neuron TANH  p_neuron SIGMOID   pand_network      p_neuron RELU  p_neuron LINEAR
     (i_in[0])      (i_in[1])       (3 x SIGMOID,       (i_in[2])      (i_in[3])
                                     weights J, h)
        \______________\____________________|______________/__________/
                         7 output bits -> 2 x pbit_counter (selectable)
```

## The stochastic unit and its distributions

`lfsr32` is a 32-stage Fibonacci LFSR with feedback taps at stages 32, 22, 2
and 1 (polynomial x^32 + x^22 + x^2 + x + 1, maximal length). All 32 stages are
read in parallel as the random word. Over one period, every non-zero 32-bit
value appears once.

`stochastic_unit` holds two of them with different seeds:

* `u_gauss = (A >> 1) + (B >> 1)`. Each operand is uniform on [0, 2^31), so
  the sum is triangular on [0, 2^32) and peaks at 2^31. Shifting both operands
  first means the 32-bit adder can never overflow. Written as a fraction
  x = I_IN / 2^32, the firing probability is the triangular CDF:
  `P = 2x^2` for x < 1/2 and `P = 1 - 2(1-x)^2` for x >= 1/2. This is the
  digital stand-in for the normal distribution that gives a sigmoid. Read as a
  bipolar value, `2P - 1` is the corresponding tanh-like curve.
* `u_unif = B`. It is uniform, so `P = x` (linear).

The steepness of the sigmoid is fixed by the width of the triangle, which
spans the full input range. To make a neuron steeper, scale its input before
the comparator, as `pand_network` does.

## The four neurons and their number formats

`p_neuron` is parameterised by `ACT` (`pneuron_pkg::act_t`). All four kinds use
the same unsigned 32-bit magnitude comparator with a registered output.

* **p-Tanh, p-Sigmoid, p-Linear**: `I_IN` is unsigned Q0.32, so the value is
  `I_IN / 2^32` in [0, 1). The hardware of these three is identical. "Tanh"
  and "Linear" only mean that the output bit is read as +1/-1 rather than 1/0.
  Connect Tanh and Sigmoid neurons to `u_gauss` and Linear neurons to `u_unif`.
* **p-ReLU**: `I_IN` is two's complement Q1.31, a value in [-1, 1). An unsigned
  comparator would let every negative input fire, because its MSB is set. A
  rectification multiplexer selected by `I_IN[31]` therefore forces the output
  to 0 for negative inputs. A non-negative input is compared with `U_S >> 1`,
  a uniform word on [0, 2^31) that has the same scale as Q1.31. The average
  output is then `max(0, I_IN)`. Connect the neuron to `u_unif`.

The source describes `I_IN` both as "unsigned fixed point" and as "two's
complement". This design resolves the conflict in the way just given:
unsigned for the comparator, and two's complement only where the sign changes
the hardware (ReLU).

Measured firing rates from the system testbench, 20,000 samples per point at
full 32-bit size:

| x | p-Sigmoid (expected) | p-Tanh `<m>` | p-Linear | ReLU input r | p-ReLU |
|---|---|---|---|---|---|
| 0.1 | 0.020 (0.020) | -0.960 | 0.104 | -0.8 | 0.000 |
| 0.3 | 0.172 (0.180) | -0.657 | 0.296 | -0.3 | 0.000 |
| 0.5 | 0.504 (0.500) | 0.008 | 0.501 | 0.2 | 0.199 |
| 0.7 | 0.821 (0.820) | 0.642 | 0.699 | 0.5 | 0.500 |
| 0.9 | 0.978 (0.980) | 0.956 | 0.897 | 0.9 | 0.897 |

## The p-AND Boltzmann network

`pand_network` holds three p-Sigmoid neurons A, B, C (bits 0, 1, 2 of `m`). They
form a fully connected Boltzmann machine whose likely states are exactly those
with C = A AND B. The weights and biases are the `J` and `H` parameters:

| | A | B | C | bias |
|---|---|---|---|---|
| A | 0 | -1 | 2 | 1 |
| B | -1 | 0 | 2 | 1 |
| C | 2 | 2 | 0 | -2 |

The spins are bipolar: bit 1 means +1 and bit 0 means -1. On each enabled step
exactly one neuron is updated, in the order A, B, C, A, and so on (Gibbs
sampling). The synapse first computes `I_k = H[k] + sum_j J[k][j] * s_j`. It
then maps this onto the comparator input, centred on the midpoint of the
triangular distribution:

    I_IN = 2^31 + I_k * BETA        (saturated to [0, 2^32 - 1])

`BETA` acts as the inverse temperature. Its default, 0x3000_0000 (0.1875 of
full scale per unit of `I`), was chosen for this design. An exact Markov-chain
calculation with the triangular CDF then gives about 98% of the time in the
four AND states.

A larger `BETA` is not better. At 0.25 of full scale, an input of |I| >= 2
already saturates the triangle. State 111 then becomes absorbing, because every
neuron sees I = +2 there, and the chain stops mixing.

`clamp_en`/`clamp_val` hold chosen neurons fixed:

* Clamp A and B and the gate runs forward: C follows A AND B.
* Clamp C = 1 and it runs in reverse: A and B settle at 1.

The clamp overrides the neuron's output, and the clamped neuron is not
updated.

The testbench measured 98% of samples in the AND states. The four states did
not share the time equally, however. With A,B,C the shares were about 30%
(000), 21% (100), 14% (010) and 33% (111), where an ideal sampler gives 24%
each.

The cause is the shared parallel-read LFSR. Consecutive words are shifted
copies of each other, so the neurons updated on consecutive clocks draw
correlated random numbers. A generator that decorrelated consecutive words
would remove this bias. The obvious ways are a leap-forward LFSR that advances
32 steps per clock, or a different tap per neuron. Either would depart from
the two-LFSR-and-adder unit described here, so neither is included.

## System top: `pneuron_top`

`pneuron_top` connects one `stochastic_unit` to the following neurons:

* `u_gauss` feeds a p-Tanh neuron, a p-Sigmoid neuron and the p-AND network;
* `u_unif` feeds a p-ReLU neuron and a p-Linear neuron.

`update_rate_switch` turns the two bench switches into one clock enable,
`tick`:

* `circuit_en` low: no ticks, and everything holds;
* `freq_sel` = 0: a tick on every clock;
* `freq_sel` = 1: a tick on one clock in 16 (`DIV_LOG2` = 4).

The stochastic unit advances on each tick. On the same tick, every activation
neuron samples and one p-AND neuron updates.

Two `pbit_counter`s measure time averages. Each is routed by `cnt_sel` to one
of the seven outputs: 0-3 are `m_act[0..3]` (tanh, sigmoid, relu, linear) and
4-6 are `m_and` A, B, C. Each counter counts ticks (`cnt_samples`) and ticks on
which the output was 1 (`cnt_ones`). `cnt_clr` zeroes both counters, and both
saturate instead of wrapping. A counter samples its output just before the
clock edge of a tick, so it sees the neuron value computed on the previous
tick.

Timing: everything is synchronous to `clk`, and `rst` is a synchronous,
active-high reset. A neuron output changes on the clock edge after the tick
that computed it. The random words are combinational from the LFSR registers,
so the only paths worth noting are:

* LFSR register, then the 32-bit adder, then the comparator, then the output
  flip-flop;
* in `pand_network`, the synapse sum and its multiply by `BETA` ahead of that
  same path.

Yosys' coarse synthesis reports 205 flip-flop bits for the whole top:

* 64 for the LFSRs;
* 128 for the counters;
* 4 for the divider;
* 9 for the neurons and the update index.

A single `p_neuron` synthesises to 6 word-level cells (one of them the 32-bit
comparator) and 1 flip-flop. That is the per-neuron cost once the generator is
shared.

## What follows the source and what is this design's own

These follow the source:

* the decoupled comparator neuron;
* the 32-bit word width;
* two 32-bit LFSRs, each shifted right by one, into a 32-bit adder for the
  normal-like word, and one LFSR for the uniform word;
* LFSR stages 32, 22, 2, 1;
* the four activation kinds;
* the ReLU rectification mux selected by the input MSB;
* one stochastic unit shared by all neurons;
* the p-AND weights, biases and update order A, B, C;
* forward and reverse operation of the p-AND gate;
* two p-bit counters, a circuit enable and a clock-frequency switch on the
  bench.

These are this design's own choices:

* XOR feedback and the seeds;
* reading the whole LFSR in parallel, with stage 32 as the MSB;
* taking the uniform word unshifted from LFSR B, and the `>> 1` inside the
  ReLU neuron;
* a strict `>` comparison and a registered output;
* bipolar spins and the `BETA` scaling in the p-AND synapse;
* clamping as the mechanism for forward and reverse operation;
* 8-bit weights;
* binary saturating counters, the counter routing, and a clock-enable divider
  in place of a real clock switch.

Not included:

* the sMTJ devices;
* the two-sMTJ (2M) and sMTJ-plus-resistor (1M1R) voltage-divider stochastic
  cells;
* the transistor-level differential-amplifier activation units;
* the FPGA board and its seven-segment displays.

## Files

| file | contents |
|---|---|
| `rtl/pneuron_pkg.sv` | word width, LFSR taps, `act_t`, `weight_t` |
| `rtl/lfsr32.sv` | 32-bit Fibonacci LFSR |
| `rtl/stochastic_unit.sv` | two LFSRs, shift, adder; `u_gauss`, `u_unif` |
| `rtl/p_neuron.sv` | comparator neuron with ReLU rectification option |
| `rtl/pand_network.sv` | three-neuron p-AND Boltzmann machine |
| `rtl/pbit_counter.sv` | time-average counter |
| `rtl/update_rate_switch.sv` | enable and fast/slow update strobe |
| `rtl/pneuron_top.sv` | whole system |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_activation_curves` (full curve sweeps) |

## Verification

Every testbench checks its module against values computed independently in
the testbench. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `tb_lfsr32`: a reference model of the polynomial predicts every state. The
  test also checks that no state repeats in 200,000 steps and that each bit is
  balanced.
* `tb_stochastic_unit`: the test predicts both words exactly. It also checks
  that the triangular word has mean 2^31 and puts 75% of its samples in the
  middle half of the range (theory: 75%), against 50% for the uniform word.
* `tb_p_neuron`: 22,000 random and corner-case input pairs on all four kinds,
  with reset and hold checked too.
* `tb_pand_network`: a reference synapse predicts every update exactly. The
  test then checks the state histogram, forward mode and reverse mode.
* `tb_pbit_counter` and `tb_update_rate_switch`: exact counts, clear and
  saturation; tick spacing in both modes, and no ticks when disabled.
* `tb_pneuron_top`: the whole system at its default parameters. It runs the
  activation-curve sweeps in the table above, checks both counters exactly,
  and runs the p-AND gate free, forward and in reverse. It also exercises slow
  mode, circuit disable and counter clear. It counts how often each mechanism
  happened and fails if any never did.
* `tb_activation_curves`: the four neurons, sharing one stochastic unit, are
  each swept over 21 points. The unsigned inputs run from 0 to 1 and the
  ReLU input from -1 to 1, with 10,000 updates per point. Each point is
  compared with the CDF of its random word. The printed table is the
  time-averaged curve of each neuron. For example, at x = 0.25 p-Tanh gives
  -0.749 and p-Linear gives -0.500; at r = 0.5 p-ReLU gives 0.493.

The statistical checks use tolerances: ±0.03 on firing rates, and >90% for
the p-AND gate modes.

Each testbench runs in well under a second with Verilator, for example:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/pneuron_pkg.sv \
        tb/tb_pneuron_top.sv --top-module tb_pneuron_top
    ./obj_dir/Vtb_pneuron_top

To change the network, override `J`, `H` and `BETA` of `pand_network`. To add
neurons, instantiate more `p_neuron`s on the same `u_gauss` or `u_unif`.
