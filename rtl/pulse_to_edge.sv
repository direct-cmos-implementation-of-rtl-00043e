// pulse_to_edge: turns a spike pulse into an edge that stays high until the
// wave ends. The paper builds this as a 1-bit accumulator (an SR flip-flop
// with an XOR gate); here it is a set-only flag. edge is combinational in the
// cycle the pulse starts and registered from then on; gclk (the gamma strobe)
// or rst clears it at the next aclk edge.
module pulse_to_edge (
  input  logic aclk,
  input  logic rst,
  input  logic gclk,
  input  logic pulse,
  output logic edge_o
);

  logic seen_q;

  assign edge_o = pulse || seen_q;

  always_ff @(posedge aclk) begin
    if (rst || gclk) seen_q <= 1'b0;
    else if (pulse)  seen_q <= 1'b1;
  end

endmodule
