// tb_wta_inhibition: self-checking test of 1-WTA inhibition over 10 neurons.
// Each wave gives every neuron a random 8-cycle spike pulse start (or none).
// Expected: only the earliest-starting neuron with the lowest index among the
// earliest passes, with its pulse intact; all other outputs stay 0. Waves with
// ties and with no spike at all are counted and must occur.
module tb_wta_inhibition;
  localparam int Q = 10;
  localparam int NONE = 99;

  logic aclk = 1'b0, rst = 1'b1, gclk = 1'b0;
  logic [Q-1:0] z = '0, zo;
  int checks = 0, failures = 0, n_tie = 0, n_empty = 0, n_inhibited = 0;
  int t_z [Q];

  wta_inhibition #(.Q(Q)) dut (.*);

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
    for (int wave = 0; wave < 300; wave++) begin
      int tmin, win, nmin;
      tmin = NONE; win = -1; nmin = 0;
      for (int i = 0; i < Q; i++) begin
        t_z[i] = ($urandom_range(4) == 0 || wave % 25 == 0) ? NONE : $urandom_range(12);
        if (t_z[i] < tmin) begin tmin = t_z[i]; win = i; nmin = 1; end
        else if (t_z[i] == tmin && t_z[i] != NONE) nmin++;
      end
      if (win < 0) n_empty++;
      if (nmin > 1) n_tie++;
      for (int i = 0; i < Q; i++) if (t_z[i] != NONE && i != win) n_inhibited++;
      for (int t = 0; t < 15; t++) begin
        logic [Q-1:0] exp_zo;
        @(negedge aclk);
        for (int i = 0; i < Q; i++) z[i] = (t_z[i] != NONE) && t >= t_z[i] && t < t_z[i] + 8;
        exp_zo = '0;
        if (win >= 0) exp_zo[win] = z[win];
        #1;
        check(zo == exp_zo, $sformatf("wave %0d t=%0d zo=%b exp %b", wave, t, zo, exp_zo));
      end
      @(negedge aclk); z = '0; gclk = 1'b1;
      @(negedge aclk); gclk = 1'b0;
    end
    check(n_tie > 0 && n_empty > 0 && n_inhibited > 0, "ties, empty waves and inhibitions all seen");
    $display("ties=%0d empty=%0d inhibited=%0d", n_tie, n_empty, n_inhibited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300 * 20) @(posedge aclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
