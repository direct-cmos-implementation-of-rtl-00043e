// wta_inhibition: 1-winner-take-all lateral inhibition over the Q neuron
// outputs of a column.
//
// Each neuron spike z[i] goes through a less-than-or-equal latch whose inhibit
// input is the edge form of the first spike: the passed spikes are ORed, the OR
// is turned into an edge that stays high for the rest of the wave, and that
// edge blocks every spike that starts later. Spikes that start in the same
// cycle as the first one pass the latch; among those the lowest index wins,
// because each output is also masked by the passed spikes of all lower-indexed
// neurons. The result is at most one output pulse per wave (a 1-hot cluster
// id), carrying the winner's spike time.
//
// Timing: zo is combinational from z (no added latency). gclk or rst clears the
// inhibit edge and the latches at the next aclk edge.
module wta_inhibition #(
  parameter int unsigned Q = 10
) (
  input  logic         aclk,
  input  logic         rst,
  input  logic         gclk,
  input  logic [Q-1:0] z,    // neuron spike pulses
  output logic [Q-1:0] zo    // inhibited outputs, at most one active
);

  logic [Q-1:0] passed;
  logic         first, inhibit;

  for (genvar i = 0; i < Q; i++) begin : g_le
    le_latch u_le (
      .aclk, .rst, .gclk, .data(z[i]), .inhibit, .pass_o(passed[i])
    );
  end

  assign first = |passed;

  pulse_to_edge u_p2e (
    .aclk, .rst, .gclk, .pulse(first), .edge_o(inhibit)
  );

  // Tie break: lowest index wins.
  always_comb begin
    zo = '0;
    for (int unsigned i = 0; i < Q; i++) begin
      zo[i] = passed[i];
      for (int unsigned j = 0; j < i; j++) if (passed[j]) zo[i] = 1'b0;
    end
  end

  a_one_hot: assert property (@(posedge aclk) disable iff (rst) $onehot0(zo));

endmodule
