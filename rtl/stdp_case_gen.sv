// stdp_case_gen: decides, for one synapse, which STDP case of the wave applies.
//
// The input spike pulse x is turned into an edge (pulse_to_edge) so that it is
// still known at the end of the wave. The neuron's output edge z_edge is made
// once per neuron outside and shared by its synapses. A less-than-or-equal
// latch gives le = "x arrived no later than z". The four cases are
//   case 1 (capture):  le &  x &  z      input before or with output
//   case 2 (minus):   !le &  x &  z      output before input
//   case 3 (search):   le & (x ^ z)      input only
//   case 4 (backoff): !le & (x ^ z)      output only
// and no case is active when neither spiked. At most one case is 1.
// The outputs are edges; they are meant to be read on the gamma strobe, when
// all spikes of the wave have arrived. gclk or rst clears the state.
module stdp_case_gen (
  input  logic       aclk,
  input  logic       rst,
  input  logic       gclk,
  input  logic       x,        // input spike pulse of this synapse
  input  logic       z_edge,   // neuron output spike, edge form
  output logic [3:0] cases     // {case4, case3, case2, case1}
);

  logic x_edge, le;

  pulse_to_edge u_p2e (
    .aclk, .rst, .gclk, .pulse(x), .edge_o(x_edge)
  );

  le_latch u_le (
    .aclk, .rst, .gclk, .data(x_edge), .inhibit(z_edge), .pass_o(le)
  );

  assign cases[0] =  le &  x_edge & z_edge;
  assign cases[1] = !le &  x_edge & z_edge;
  assign cases[2] =  le & (x_edge ^ z_edge);
  assign cases[3] = !le & (x_edge ^ z_edge);

  a_at_most_one: assert property (@(posedge aclk) disable iff (rst) $onehot0(cases));

endmodule
