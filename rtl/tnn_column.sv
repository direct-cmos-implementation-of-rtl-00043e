// tnn_column: a P x Q column of a temporal neural network with on-line STDP
// learning. The default, P = 784 inputs and Q = 10 neurons, is the prototype
// that clusters 28x28 MNIST images into 10 groups.
//
// Dataflow: every input spike x[i] fans out over the synaptic crossbar to
// synapse i of each of the Q RNL neurons (rnl_neuron). The neuron spikes go
// through winner-take-all inhibition (wta_inhibition), so at most one output
// z[j] spikes per wave, at the winner's spike time. STDP then works on the
// inhibited outputs: each of the P*Q synapses has a case generator, a
// stabiliser and inc/dec logic, and the resulting requests change the weights
// on the gamma strobe.
//
// Time base: aclk is the unit of spike time; gclk is a one-aclk-cycle strobe
// marking the end of each gamma wave (the paper's second clock, here sampled
// on aclk). A wave is used as follows: input spikes start on cycles 0..7 of the
// wave as 8-cycle pulses, the neurons integrate until the last pulse has ended
// (cycle 14 at the latest), and gclk is asserted on the following cycle, on
// which x must be all zero. On that edge the weights are updated and all
// per-wave state is cleared, so the wave period is 16 aclk cycles.
//
// The Bernoulli random bits (brv) come from outside; one set is shared by all
// synapses of the column. theta is the firing threshold of all neurons.
module tnn_column
  import tnn_pkg::*;
#(
  parameter int unsigned P      = 784,
  parameter int unsigned Q      = 10,
  parameter int unsigned ACC_W  = $clog2(P) + 1,
  parameter weight_t     W_INIT = '0
) (
  input  logic             aclk,
  input  logic             rst,      // synchronous, active high
  input  logic             gclk,     // gamma strobe, one aclk cycle per wave
  input  logic [P-1:0]     x,        // input spike pulses
  input  logic [ACC_W-1:0] theta,    // firing threshold
  input  brv_t             brv,      // random bits for STDP
  output logic [Q-1:0]     z_raw,    // neuron spikes before inhibition
  output logic [Q-1:0]     z         // 1-hot winner spike
);

  logic [P-1:0] inc [Q];
  logic [P-1:0] dec [Q];
  weight_t      w   [Q][P];
  logic [Q-1:0] z_edge;

  for (genvar j = 0; j < Q; j++) begin : g_neu
    rnl_neuron #(.P(P), .ACC_W(ACC_W), .W_INIT(W_INIT)) u_neuron (
      .aclk, .rst, .gclk, .x,
      .inc(inc[j]), .dec(dec[j]), .theta,
      .spike(z_raw[j]), .weights(w[j])
    );

    // Output-spike edge, shared by all synapses of neuron j.
    pulse_to_edge u_z2e (
      .aclk, .rst, .gclk, .pulse(z[j]), .edge_o(z_edge[j])
    );

    for (genvar i = 0; i < P; i++) begin : g_stdp
      logic [3:0] cases;
      logic       stab;

      stdp_case_gen u_case (
        .aclk, .rst, .gclk, .x(x[i]), .z_edge(z_edge[j]), .cases
      );
      stdp_stabilizer u_stab (.w(w[j][i]), .brv, .stab);
      stdp_incdec u_incdec (
        .cases, .stab, .brv, .inc(inc[j][i]), .dec(dec[j][i])
      );
    end
  end

  wta_inhibition #(.Q(Q)) u_wta (
    .aclk, .rst, .gclk, .z(z_raw), .zo(z)
  );

  a_no_spike_on_gclk: assert property (@(posedge aclk) disable iff (rst) gclk |-> x == '0);

endmodule
