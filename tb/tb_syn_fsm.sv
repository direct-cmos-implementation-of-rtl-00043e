// tb_syn_fsm: self-checking test of one RNL synapse FSM.
// Sets weights 0..7 through inc strobes, then for each weight sends an 8-cycle
// spike pulse and checks that exactly w up-steps come out on the first w
// cycles of the pulse and that the weight is the same afterwards. Also checks
// saturation at 7 and 0, decrements, and that an update strobe during a spike
// does not change the weight.
module tb_syn_fsm;
  import tnn_pkg::*;

  logic aclk = 1'b0, rst = 1'b1, gclk = 1'b0, x = 1'b0, inc = 1'b0, dec = 1'b0;
  logic up_step;
  weight_t weight;
  int checks = 0, failures = 0;

  syn_fsm dut (.*);

  always #5 aclk = ~aclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic strobe(input logic i, input logic d);
    @(negedge aclk); gclk = 1'b1; inc = i; dec = d;
    @(negedge aclk); gclk = 1'b0; inc = 1'b0; dec = 1'b0;
  endtask

  // Sends one 8-cycle pulse and checks the readout of weight w.
  task automatic wave(input int w);
    for (int t = 0; t < 8; t++) begin
      @(negedge aclk); x = 1'b1; #1;
      check(up_step == (t < w), $sformatf("w=%0d t=%0d up_step=%0b", w, t, up_step));
    end
    for (int t = 8; t < 12; t++) begin
      @(negedge aclk); x = 1'b0; #1;
      check(up_step == 1'b0, $sformatf("w=%0d t=%0d up_step after pulse", w, t));
    end
    check(weight == weight_t'(w), $sformatf("weight %0d not restored (%0d)", w, weight));
    strobe(1'b0, 1'b0);   // end of wave
  endtask

  initial begin
    repeat (2) @(negedge aclk);
    rst = 1'b0;
    check(weight == 3'd0, "reset weight");
    wave(0);
    for (int w = 1; w <= 7; w++) begin
      strobe(1'b1, 1'b0);
      check(weight == weight_t'(w), $sformatf("inc to %0d", w));
      wave(w);
    end
    strobe(1'b1, 1'b0);
    check(weight == 3'd7, "saturate at 7");
    strobe(1'b0, 1'b1);
    strobe(1'b0, 1'b1);
    check(weight == 3'd5, "dec to 5");
    wave(5);
    // Update strobe while the spike is present is ignored.
    @(negedge aclk); gclk = 1'b1; inc = 1'b1; x = 1'b1;
    @(negedge aclk); gclk = 1'b0; inc = 1'b0;
    repeat (7) @(negedge aclk);
    x = 1'b0;
    #1 check(weight == 3'd5, "update during spike ignored");
    strobe(1'b0, 1'b0);
    for (int k = 0; k < 6; k++) strobe(1'b0, 1'b1);
    check(weight == 3'd0, "saturate at 0");
    wave(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge aclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
