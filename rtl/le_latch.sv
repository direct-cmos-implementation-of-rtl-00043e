// le_latch: the temporal "less than or equal" operator of the paper.
//
// data passes to pass_o only if it arrives no later than inhibit, i.e. on a
// cycle where inhibit was still low in the previous cycle (arriving in the
// same cycle as inhibit counts as "equal" and passes). Once data has been let
// through it keeps passing for the rest of the wave even after inhibit rises,
// so a data pulse is passed whole. inhibit must be an edge (it stays high once
// it rises); data may be a pulse or an edge. gclk or rst ends the wave.
// pass_o is combinational from data.
module le_latch (
  input  logic aclk,
  input  logic rst,
  input  logic gclk,
  input  logic data,
  input  logic inhibit,
  output logic pass_o
);

  logic inh_q;   // inhibit as seen in the previous cycle
  logic ok_q;    // data arrived before inhibit

  assign pass_o = data && (ok_q || !inh_q);

  always_ff @(posedge aclk) begin
    if (rst || gclk) begin
      inh_q <= 1'b0;
      ok_q  <= 1'b0;
    end else begin
      inh_q <= inhibit;
      if (data && !inh_q) ok_q <= 1'b1;
    end
  end

endmodule
