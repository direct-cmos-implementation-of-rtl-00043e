// rnl_neuron: an SRM0 neuron with P synapses and the ramp-no-leak response.
//
// Each synapse is a syn_fsm: an input spike makes it emit w one-cycle up-steps,
// w being its stored weight, so the potential contributed by that synapse rises
// by one per cycle up to w and stays there until the wave ends (the RNL ramp).
// The neuron_body sums all up-steps, compares with theta and shapes the output
// spike into an 8-cycle pulse.
//
// Interface: x[i] is the spike pulse of input i; inc[i]/dec[i] request a weight
// change of synapse i, applied on the gamma strobe gclk. weights exposes the
// stored weights (3 bits per synapse) for observation.
// Timing: spike is combinational from x (same cycle as the threshold crossing).
module rnl_neuron
  import tnn_pkg::*;
#(
  parameter int unsigned P      = 784,
  parameter int unsigned ACC_W  = $clog2(P) + 1,
  parameter weight_t     W_INIT = '0
) (
  input  logic             aclk,
  input  logic             rst,
  input  logic             gclk,
  input  logic [P-1:0]     x,
  input  logic [P-1:0]     inc,
  input  logic [P-1:0]     dec,
  input  logic [ACC_W-1:0] theta,
  output logic             spike,
  output weight_t          weights [P]
);

  logic [P-1:0] up;

  for (genvar i = 0; i < P; i++) begin : g_syn
    syn_fsm #(.W_INIT(W_INIT)) u_fsm (
      .aclk, .rst, .gclk,
      .x(x[i]), .inc(inc[i]), .dec(dec[i]),
      .up_step(up[i]), .weight(weights[i])
    );
  end

  neuron_body #(.P(P), .ACC_W(ACC_W)) u_body (
    .aclk, .rst, .gclk, .up, .theta, .fire(), .spike
  );

endmodule
