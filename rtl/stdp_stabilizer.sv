// stdp_stabilizer: the weight-dependent learning factor of STDP.
//
// F(w) = (w/7)(1 - w/7) is 0 at w = 0 and w = 7 and between 0 and 1 for
// w = 1..6. Six Bernoulli bits brv.stab[w-1], each 1 with probability F(w),
// come from outside; an 8-to-1 multiplexer indexed by the 3-bit weight picks
// one (constant 0 for w = 0 and 7). ORing with brv.min implements
// max(F(w), mu_min) of the update rules. Purely combinational.
module stdp_stabilizer
  import tnn_pkg::*;
(
  input  weight_t w,
  input  brv_t    brv,
  output logic    stab    // B(max(F(w), mu_min))
);

  logic f;

  always_comb begin
    unique case (w)
      3'd0, 3'd7: f = 1'b0;
      default:    f = brv.stab[w - 3'd1];
    endcase
  end

  assign stab = f | brv.min;

endmodule
