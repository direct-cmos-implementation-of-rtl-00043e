// syn_fsm: one synapse of an RNL (ramp-no-leak) neuron. The 3-bit state both
// stores the synaptic weight and reads it out, so no separate weight register
// exists.
//
// Readout: while the input spike pulse x is high the state counts down by one
// every aclk cycle (the paper gates aclk with the spike to form "tclk"). The
// up-step output is 1 on every cycle until the count has passed S0; the wrap
// S0 -> S7 sets a latch that holds the output at 0 for the rest of the wave.
// A weight w therefore gives exactly w consecutive up-steps starting on the
// cycle the spike arrives, and after the 8 cycles of the pulse the count has
// wrapped back to w, so reading does not disturb the weight.
//
// Update: on a gamma strobe (gclk) the weight is incremented if inc, decremented
// if dec, saturating at 0 and W_MAX, and the output latch is released. As in
// the paper, inc/dec are honoured only when no input spike is present.
//
// Timing: single clock aclk. The paper uses asynchronous set/reset flip-flops
// clocked by gclk with tclk on the asynchronous inputs; here gclk is a one-cycle
// strobe sampled on aclk, so the whole column is one synchronous clock domain.
// up_step is combinational from the state and x (same cycle as the spike).
// The input pulse must be PULSE_W cycles long for the weight to be restored.
module syn_fsm
  import tnn_pkg::*;
#(
  parameter weight_t W_INIT = '0  // weight after reset (paper does not say)
) (
  input  logic    aclk,
  input  logic    rst,       // synchronous, active high
  input  logic    gclk,      // gamma strobe: weight update and wave restart
  input  logic    x,         // input spike pulse
  input  logic    inc,
  input  logic    dec,
  output logic    up_step,   // 1-cycle up-steps forming the RNL ramp
  output weight_t weight     // stored weight (valid between waves)
);

  weight_t cnt_q;
  logic    done_q;   // set by the S0 -> S7 wrap, released by gclk

  assign up_step = x && !done_q && (cnt_q != '0);
  assign weight  = cnt_q;

  always_ff @(posedge aclk) begin
    if (rst) begin
      cnt_q  <= W_INIT;
      done_q <= 1'b0;
    end else begin
      if (x) begin
        cnt_q <= cnt_q - 1'b1;                       // tclk: count down
      end else if (gclk) begin
        if (inc && cnt_q != weight_t'(W_MAX)) cnt_q <= cnt_q + 1'b1;
        else if (dec && cnt_q != '0)          cnt_q <= cnt_q - 1'b1;
      end
      if (gclk)                     done_q <= 1'b0;  // latch released
      else if (x && cnt_q == '0)    done_q <= 1'b1;  // S0 -> S7 wrap
    end
  end

  // The paper: "The inc and dec signals never arrive together".
  a_incdec_exclusive: assert property (@(posedge aclk) disable iff (rst) !(inc && dec));

endmodule
