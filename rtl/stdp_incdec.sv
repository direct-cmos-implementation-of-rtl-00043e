// stdp_incdec: forms the weight increment and decrement requests of one
// synapse from its STDP case and the random bits, following the update table:
//   case 1: +B(mu_capture) * B(max(F(w), mu_min))
//   case 2: -B(mu_minus)   * B(max(F(w), mu_min))
//   case 3: +B(mu_search)
//   case 4: -B(mu_backoff) * B(max(F(w), mu_min))
// capture and search are ORed into inc, minus and backoff into dec. Since at
// most one case is active, inc and dec are never both 1. Combinational.
module stdp_incdec
  import tnn_pkg::*;
(
  input  logic [3:0] cases,   // {case4, case3, case2, case1}
  input  logic       stab,    // from stdp_stabilizer
  input  brv_t       brv,
  output logic       inc,
  output logic       dec
);

  assign inc = (cases[0] & brv.capture & stab) | (cases[2] & brv.search);
  assign dec = (cases[1] & brv.minus   & stab) | (cases[3] & brv.backoff & stab);

endmodule
