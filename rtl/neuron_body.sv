// neuron_body: membrane potential and firing of an RNL neuron with P synapses.
//
// Every aclk cycle the P one-bit up-steps from the synapses are added to an
// ACC_W = clog2(P)+1 bit register. As in the paper's accumulative parallel
// counter, P-1 of the inputs are counted into a clog2(P)-bit value, which is
// zero-extended and added to the register, and the one remaining input (up[0])
// is the carry-in of that last adder. The register is preset to -theta in two's
// complement, so the threshold test is the sign bit of the sum alone: when the
// sum is non-negative the potential has reached theta, the neuron fires, and the
// register is reloaded with -theta on the next edge (the same happens on a
// gamma strobe). A 3-bit counter stretches a firing into an 8-cycle output
// pulse; a firing while a pulse is already running does not restart it.
//
// Timing: fire and spike rise combinationally in the cycle whose up-steps carry
// the potential to theta (a single input of weight 8 against theta 8 arriving at
// t=0 fires at t=7, as in the paper's column example). spike stays high for 8
// cycles. A gamma strobe ends a running output pulse (this design's choice; the
// paper does not say what the counter does at gclk).
//
// The adder tree is written as a count of ones and left to synthesis to build;
// the paper draws it as a tree of ripple-carry full adders.
module neuron_body
  import tnn_pkg::*;
#(
  parameter int unsigned P     = 784,
  parameter int unsigned ACC_W = $clog2(P) + 1
) (
  input  logic             aclk,
  input  logic             rst,     // synchronous, active high
  input  logic             gclk,    // gamma strobe: reload -theta, end pulse
  input  logic [P-1:0]     up,      // up-steps from the synapses
  input  logic [ACC_W-1:0] theta,   // threshold, 1 .. 2**(ACC_W-1)
  output logic             fire,    // potential reached theta this cycle
  output logic             spike    // 8-cycle output spike pulse
);

  localparam int unsigned CNT_W = ACC_W - 1;   // clog2(P)

  logic [ACC_W-1:0] acc_q, sum;
  logic [CNT_W-1:0] ones;
  logic             pulse_on_q;
  logic [2:0]       pulse_cnt_q;

  // Parallel counter over up[P-1:1].
  always_comb begin
    ones = '0;
    for (int unsigned i = 1; i < P; i++) ones += CNT_W'(up[i]);
  end

  assign sum   = acc_q + ACC_W'(ones) + ACC_W'(up[0]);
  assign fire  = !sum[ACC_W-1];
  assign spike = pulse_on_q || fire;

  always_ff @(posedge aclk) begin
    if (rst || gclk || fire) acc_q <= -theta;
    else                     acc_q <= sum;
  end

  always_ff @(posedge aclk) begin
    if (rst || gclk) begin
      pulse_on_q  <= 1'b0;
      pulse_cnt_q <= '0;
    end else if (pulse_on_q) begin
      pulse_cnt_q <= pulse_cnt_q + 1'b1;
      if (pulse_cnt_q == 3'(PULSE_W - 1)) pulse_on_q <= 1'b0;
    end else if (fire) begin
      pulse_on_q  <= 1'b1;
      pulse_cnt_q <= 3'd1;
    end
  end

endmodule
