# A learning TNN column in plain synchronous logic

A temporal neural network (TNN) carries a value in *when* a spike happens, not
in how often. Within one computation wave ("gamma cycle") every input line
spikes at most once, and its value is the spike's delay from the start of the
wave. This RTL builds the basic TNN building block, a **column**: P inputs,
Q excitatory neurons with a ramp-no-leak (RNL) response, winner-take-all
(WTA) lateral inhibition, and on-line, unsupervised spike-timing-dependent
plasticity (STDP) at every one of the P·Q synapses. The implementation is
*direct*: one hardware clock cycle is one unit of spike time, spike times are
never stored as binary numbers, and a spike is an 8-cycle pulse on a wire.

The default size, P = 784 and Q = 10, is a column that takes a 28×28 image
(one input per pixel) and learns, without labels, to assign it to one of 10
clusters. The output is one-hot: at most one of the Q outputs spikes per wave.

The design follows the gate-level description in *Direct Implementation of
Neuromorphic Temporal Neural Networks Using Off-the-Shelf CMOS Technology*
(column of SRM0 neurons with RNL response, WTA, and a per-synapse STDP rule).
It is written as synchronous RTL rather than the gate and asynchronous-latch
netlists of that work; the places where this changes behaviour or where
details had to be chosen are listed at the end.

## Spikes, waves and the two clocks

* `aclk` is the unit of time. A spike at time *t* is a pulse that rises on
  cycle *t* of the wave and stays high for 8 cycles (`PULSE_W`).
* Input spikes may start on cycles 0..7 (3-bit spike times). The last input
  pulse ends on cycle 14 at the latest.
* `gclk` marks the end of a wave. Here it is **not a second clock** but a
  one-cycle strobe sampled on `aclk`, asserted on cycle 15, on which every
  `x` must be low. On that edge all weights take their STDP update and all
  per-wave state (accumulators, latches, edge flags) is cleared. A wave is
  therefore 16 `aclk` cycles, and one input volley (one image) is processed
  per wave.

```
cycle   0 1 2 3 4 5 6 7 8 9 10 11 12 13 14 15
x[a]    ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾_ _ _  _  _  _  _  _     spike at t=0
x[b]    _ _ _ ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾ _  _  _  _  _     spike at t=3
gclk    _ _ _ _ _ _ _ _ _ _ _  _  _  _  _  ‾     STDP update, wave restart
```

The environment has to produce this framing; the column does not count
cycles itself. An assertion in `tnn_column` flags input spikes during `gclk`.

## The synapse: a 3-bit counter that is also the weight (`syn_fsm`)

The RNL response of a synapse with weight *w* to a spike at *t* is a ramp: the
neuron's potential rises by one on each of the cycles *t* .. *t+w−1* and then
stays. So a synapse only has to say "up one" (an *up-step*) on the first *w*
cycles of the input pulse.

Each synapse holds a single 3-bit register, and that register *is* the
weight. While the input pulse is high the register counts down by one per
cycle. The up-step output is 1 until the count reaches 0; the wrap from 0 to 7
sets a small latch that keeps the output at 0 for the rest of the wave. After
the 8 cycles of the pulse the counter has gone once round all 8 states and is
back at *w*. Example for *w* = 3:

```
pulse cycle  0 1 2 3 4 5 6 7   after
count        3 2 1 0 7 6 5 4   3
up_step      1 1 1 0 0 0 0 0
latch        0 0 0 0 1 1 1 1   cleared by gclk
```

This is why the spike pulse must be exactly 8 cycles: a shorter or longer
pulse leaves the weight changed. On the `gclk` strobe the counter takes the
STDP request instead: +1 on `inc`, −1 on `dec`, saturating at 0 and 7, and
only if no input spike is present.

## The neuron body: threshold by sign bit (`neuron_body`)

All P up-steps of a neuron are summed every cycle into an accumulator of
ACC_W = ⌈log2 P⌉+1 bits (11 bits for P = 784). P−1 up-steps are counted into
a ⌈log2 P⌉-bit number and the last one enters as carry-in of the adder that
adds this count to the register, the structure of an accumulative parallel
counter. The adder tree is left to synthesis here.

The register starts each wave at **−θ** in two's complement. The potential
has reached θ exactly when the sum is non-negative, so the threshold
comparator is just the inverted sign bit. When it fires:

* `fire`/`spike` go high combinationally in that cycle (a single synapse of
  weight 8 against θ = 8, spiking at t = 0, gives an output spike at t = 7);
* the register reloads −θ on the next edge;
* a 3-bit counter holds `spike` high for 8 cycles. A new firing during the
  pulse does not restart it; a later one can start a second pulse.

The sum cannot overflow: the register is negative and at most P ≤ 2^(ACC_W−1)
is added per cycle. θ must lie in 1 .. 2^(ACC_W−1); a new θ takes effect at the
next `gclk` strobe or firing.

`rnl_neuron` is simply P `syn_fsm` instances feeding one `neuron_body`.

## Winner-take-all (`wta_inhibition`)

The first neuron to spike wins and all others are silenced for the wave.
Every neuron output passes through a *less-than-or-equal* latch (`le_latch`):
a data input passes if it rises no later than the inhibit input, and once
passed it keeps passing for the rest of the wave. The passed spikes are ORed
and turned into an edge (`pulse_to_edge`, a flag that stays set until
`gclk`); that edge is the inhibit of every latch. In a synchronous design
"no later than" means "inhibit was still low in the previous cycle", so all
neurons whose spikes start in the same first cycle pass. Among those the
lowest index wins: each output is masked by the passed spikes of all lower
indices. The outputs `z` are combinational from the neuron spikes; `z_raw`
exposes the spikes before inhibition.

## STDP at every synapse

Learning happens once per wave, on the `gclk` strobe, and uses the *winner*
outputs (after inhibition). Each synapse (neuron *j*, input *i*) has:

**Case generation (`stdp_case_gen`).** The input pulse is converted into an
edge so it is still known at the end of the wave; the neuron's output edge is
made once per neuron and shared by its synapses. A less-than-or-equal latch
gives *le* = "input arrived no later than the output". Then

| case | condition                       | update |
|------|---------------------------------|--------|
| 1 capture | input and output, input first or same cycle | +1 with B(μ_capture)·B(max(F(w), μ_min)) |
| 2 minus   | input and output, output first   | −1 with B(μ_minus)·B(max(F(w), μ_min)) |
| 3 search  | input only                       | +1 with B(μ_search) |
| 4 backoff | output only                      | −1 with B(μ_backoff)·B(max(F(w), μ_min)) |
| –         | neither                          | none |

B(μ) is a random bit that is 1 with probability μ.

**Stabiliser (`stdp_stabilizer`).** F(w) = (w/7)(1−w/7) slows learning near
0 and 7 so that weights settle at the ends. Six random bits, one per
w = 1..6 with probability F(w), are selected by the weight (F = 0 at w = 0
and 7) and ORed with B(μ_min), which gives max(F(w), μ_min).

**Inc/dec (`stdp_incdec`).** `inc` = case 1 · capture · stab + case 3 ·
search; `dec` = case 2 · minus · stab + case 4 · backoff · stab. At most
one case is active, so `inc` and `dec` never coincide.

The random bits come in on the `brv` port (`tnn_pkg::brv_t`): capture,
minus, search, backoff, min and the six stabiliser bits. One set is shared
by all synapses of the column. Generating them (LFSRs and comparators that
set the μ values) is outside this RTL; to reproduce an update table that uses
μ_backoff for both decrement cases, drive `minus` and `backoff` with the same
bit.

## Files

| file | contents |
|------|----------|
| `rtl/tnn_pkg.sv` | weight width, pulse width, `weight_t`, `brv_t` |
| `rtl/syn_fsm.sv` | synapse: weight storage, RNL readout, saturating update |
| `rtl/neuron_body.sv` | accumulator, sign-bit threshold, 8-cycle output pulse |
| `rtl/rnl_neuron.sv` | P synapses + neuron body |
| `rtl/le_latch.sv` | temporal less-than-or-equal operator |
| `rtl/pulse_to_edge.sv` | pulse to wave-long edge |
| `rtl/wta_inhibition.sv` | 1-WTA, lowest index on ties |
| `rtl/stdp_case_gen.sv`, `stdp_stabilizer.sv`, `stdp_incdec.sv` | STDP per synapse |
| `rtl/tnn_column.sv` | top: crossbar, Q neurons, WTA, P·Q STDP units |

Top-level ports of `tnn_column` (parameters `P`=784, `Q`=10,
`ACC_W`=⌈log2 P⌉+1, `W_INIT`=0):

| port | dir | width | meaning |
|------|-----|-------|---------|
| `aclk` | in | 1 | unit-time clock |
| `rst` | in | 1 | synchronous reset, active high: weights ← `W_INIT` |
| `gclk` | in | 1 | end-of-wave strobe (cycle 15) |
| `x` | in | P | input spike pulses |
| `theta` | in | ACC_W | firing threshold of all neurons |
| `brv` | in | `brv_t` | STDP random bits, sampled on the `gclk` cycle |
| `z_raw` | out | Q | neuron spikes before inhibition |
| `z` | out | Q | one-hot winner spike |

The weights are not on a port (the column only learns them); testbenches read
them hierarchically as `dut.w[j][i]`.

## Verification

Each module except the helpers `le_latch` and `pulse_to_edge` (covered through
`wta_inhibition` and `stdp_case_gen`) has a self-checking testbench in `tb/`
that prints
`TB_RESULT checks=N failures=M`:

* `tb_syn_fsm` – readout of every weight 0..7, weight restored, saturation,
  update ignored during a spike.
* `tb_neuron_body` (P = 16) – random up-steps against an integer potential
  model; fire and spike compared every cycle; 8-cycle pulses.
* `tb_rnl_neuron` (P = 16) – random weights and spike times against the
  closed-form RNL potential Σ min(max(t−tᵢ+1, 0), wᵢ).
* `tb_wta_inhibition` (Q = 10) – random spike times, ties, empty waves.
* `tb_stdp_case_gen`, `tb_stdp_stabilizer`, `tb_stdp_incdec` – every case
  and random-bit combination against the update table.
* `tb_tnn_column` (16×4, 400 waves) and `tb_tnn_column_8x64` (the 8-neuron,
  64-input column, 200 waves) – the whole column against a cycle-level
  reference model of neurons, WTA and STDP. Raw and winner spikes are compared
  every cycle and all weights after every update. The test also counts firings,
  inhibited neurons, ties broken by index, waves without a winner, saturated
  updates and weight changes of each of the four STDP cases, and fails if any
  never happened.
* `tb_tnn_column_10x128` – the same test at 128 inputs and 10 neurons.

The default 784×10 configuration has 7840 synapse instances. It lints and
elaborates cleanly, but the C++ model Verilator generates for it is very large
and takes more than twenty minutes to compile on a four-core machine, so the
largest configuration simulated is 10×128. Where a long build is acceptable,
the same test runs at the default size by setting `P = 784`, `Q = 10`,
`W0 = 0` in `tb_tnn_column_10x128` and instantiating `tnn_column` without
parameter overrides.

Running one test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tnn_pkg.sv tb/tb_tnn_column.sv \
          --top-module tb_tnn_column -Mdir obj
./obj/Vtb_tnn_column
```

Column size is changed through the parameters `P` and `Q`; everything else
(accumulator width, counter width) follows.

## Where this RTL departs from, or adds to, the gate-level description

* **One clock.** The original synapse uses asynchronous set/reset flip-flops
  with a spike-gated `aclk` and `gclk` as separate clock inputs. Here
  everything is clocked by `aclk`, and `gclk` is a strobe. Behaviour per
  cycle is the same as described, but a wave is 16 cycles (spikes on 0..7,
  integration until 14, update on 15), where the original counts the gamma
  cycle as 7+8 = 15 units.
* **Up-step rule.** The readout is defined so that weight *w* gives exactly
  *w* up-steps (1 while the count is non-zero and the wrap latch is clear).
* **Output pulse.** The spike rises in the firing cycle. The pulse counter
  ignores firings during a running pulse and is cleared by `gclk`; what the
  counter does in those situations was left open.
* **Less-than-or-equal.** Implemented as "inhibit was low in the previous
  cycle", so equal spike times count as ≤. Pulse-to-edge conversion is a
  set-only flag.
* **Random bits.** Case 2 uses its own "minus" bit (the description of the
  inc/dec logic names four separate sources); the update table uses μ_backoff
  for both decrement cases. One shared set of bits per column is an
  arbitrary choice of distribution. Which stabiliser bit belongs to which
  weight is this design's choice (bit k ↔ w = k+1).
* **Reset and initial weights.** A synchronous reset and the `W_INIT`
  parameter are additions; nothing in the original fixes the starting
  weights.
* **Threshold.** One `theta` port for all neurons.
* **Adder tree.** Written as a count of ones; the original is a specific
  ripple-carry full-adder tree, which matters for its gate count and
  critical-path figures but not for function.
* **Not included.** The LFSR network for the random bits, the clock
  generation, and the spike encoding of input pixels. The step-no-leak
  variant of the neuron and multi-column layers are mentioned as extensions
  in the original work but not part of the column built here.
