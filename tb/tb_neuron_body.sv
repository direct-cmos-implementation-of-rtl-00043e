// tb_neuron_body: self-checking test of the accumulator, threshold and output
// pulse of a 16-input neuron body (the size drawn in the paper's figure).
// Random up-step vectors, thresholds and gamma strobes are applied; an integer
// model of the potential (fire when potential + new up-steps >= theta, then
// start again from zero) and of the 8-cycle output pulse is compared with fire
// and spike on every cycle. Pulse lengths are measured and must be 8.
module tb_neuron_body;
  localparam int P = 16;
  localparam int ACC_W = 5;

  logic aclk = 1'b0, rst = 1'b1, gclk = 1'b0;
  logic [P-1:0] up = '0;
  logic [ACC_W-1:0] theta = 5'd8;
  logic fire, spike;
  int checks = 0, failures = 0;
  int pot = 0, pulse_left = 0, run = 0, n_fire = 0, n_pulse8 = 0;

  neuron_body #(.P(P)) dut (.*);

  always #5 aclk = ~aclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge aclk);
    rst = 1'b0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit exp_fire, exp_spike;
      int ones;
      @(negedge aclk);
      gclk = ($urandom_range(15) == 0) || (cyc % 500 == 0);
      // the threshold is changed only on a gamma strobe, which reloads -theta
      if (cyc % 500 == 0) theta = ACC_W'(1 + $urandom_range(15));
      // sparse up-steps so that pulses can run their full length
      for (int i = 0; i < P; i++) up[i] = gclk ? 1'b0 : ($urandom_range(9) == 0);
      #1;
      ones = $countones(up);
      exp_fire  = !gclk && (pot + ones >= int'(theta));
      exp_spike = (pulse_left > 0) || exp_fire;
      check(fire == exp_fire, $sformatf("cyc %0d fire=%0b exp %0b pot=%0d ones=%0d", cyc, fire, exp_fire, pot, ones));
      check(spike == exp_spike, $sformatf("cyc %0d spike=%0b exp %0b", cyc, spike, exp_spike));
      // pulse length bookkeeping
      if (spike) run++;
      else begin
        if (run != 0) begin
          n_pulse8 += (run == 8);
        end
        run = 0;
      end
      // model update
      if (gclk) begin
        pot = 0; pulse_left = 0;
        run = 0;
      end else begin
        if (exp_fire) begin
          pot = 0; n_fire++;
        end else pot += ones;
        if (pulse_left > 0) pulse_left--;
        else if (exp_fire) pulse_left = 7;
      end
    end
    check(n_fire > 50, $sformatf("only %0d firings", n_fire));
    check(n_pulse8 > 10, $sformatf("only %0d complete 8-cycle pulses", n_pulse8));
    $display("fires=%0d full pulses=%0d", n_fire, n_pulse8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge aclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
