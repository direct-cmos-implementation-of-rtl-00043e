// tb_stdp_case_gen: self-checking test of the STDP case generator.
// Each wave has a random input spike time and a random output spike time
// (either may be absent). At the end of the wave the four case outputs must
// match the update table: input no later than output -> case 1, output first
// -> case 2, input only -> case 3, output only -> case 4, neither -> none.
module tb_stdp_case_gen;
  localparam int NONE = 99;

  logic aclk = 1'b0, rst = 1'b1, gclk = 1'b0, x = 1'b0, z_edge = 1'b0;
  logic [3:0] cases;
  int checks = 0, failures = 0;
  int seen [5];

  stdp_case_gen dut (.*);

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
    for (int wave = 0; wave < 400; wave++) begin
      int tx, tz, c;
      logic [3:0] exp_cases;
      tx = ($urandom_range(3) == 0) ? NONE : $urandom_range(7);
      tz = ($urandom_range(3) == 0) ? NONE : $urandom_range(14);
      if (wave < 20) tz = tx;            // make sure equal times are covered
      if (tx != NONE && tz != NONE) c = (tx <= tz) ? 0 : 1;
      else if (tx != NONE)          c = 2;
      else if (tz != NONE)          c = 3;
      else                          c = 4;
      seen[c]++;
      exp_cases = (c < 4) ? 4'(1 << c) : 4'b0;
      for (int t = 0; t < 15; t++) begin
        @(negedge aclk);
        x = (tx != NONE) && t >= tx && t < tx + 8;
        z_edge = (tz != NONE) && t >= tz;
        #1;
        check($onehot0(cases), "at most one case");
      end
      check(cases == exp_cases, $sformatf("wave %0d tx=%0d tz=%0d cases=%b exp %b", wave, tx, tz, cases, exp_cases));
      @(negedge aclk); x = 1'b0; gclk = 1'b1;
      #1 check(cases == exp_cases, "cases held into the update cycle");
      @(negedge aclk); gclk = 1'b0; z_edge = 1'b0;
      #1 check(cases == 4'b0, "cleared after the gamma strobe");
    end
    for (int c = 0; c < 5; c++) check(seen[c] > 0, $sformatf("case %0d never occurred", c + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400 * 20) @(posedge aclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
