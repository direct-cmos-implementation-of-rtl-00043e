// tb_rnl_neuron: end-to-end test of one 16-synapse RNL neuron.
// Each round programs random weights through inc strobes, then runs a wave with
// random input spike times (0..7, most inputs silent) and a random threshold.
// The model computes the potential at cycle t as sum_i min(max(t-t_i+1,0), w_i)
// (the ramp-no-leak response) and the first cycle where it reaches theta; the
// neuron's spike must rise exactly then and stay high for 8 cycles (or until
// the wave ends). The weights must be unchanged after the wave.
module tb_rnl_neuron;
  import tnn_pkg::*;
  localparam int P = 16;
  localparam int ACC_W = 5;
  localparam int NONE = 99;

  logic aclk = 1'b0, rst = 1'b1, gclk = 1'b0;
  logic [P-1:0] x = '0, inc = '0, dec = '0;
  logic [ACC_W-1:0] theta;
  logic spike;
  weight_t weights [P];
  int checks = 0, failures = 0, n_fired = 0, n_silent = 0;
  int w_tgt [P];
  int t_in [P];

  rnl_neuron #(.P(P)) dut (.*);

  always #5 aclk = ~aclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic strobe();
    @(negedge aclk); gclk = 1'b1;
    @(negedge aclk); gclk = 1'b0; inc = '0; dec = '0;
  endtask

  initial begin
    theta = 5'd8;
    repeat (2) @(negedge aclk);
    rst = 1'b0;
    for (int round = 0; round < 60; round++) begin
      int t_fire, pot;
      // the threshold is loaded by the gamma strobes below
      theta = ACC_W'(1 + $urandom_range(15));
      // program weights: clear to 0 with 7 decrements, then w increments
      repeat (7) begin
        dec = '1;
        strobe();
      end
      for (int i = 0; i < P; i++) w_tgt[i] = $urandom_range(7);
      for (int k = 0; k < 7; k++) begin
        for (int i = 0; i < P; i++) inc[i] = (k < w_tgt[i]);
        strobe();
      end
      for (int i = 0; i < P; i++)
        check(weights[i] == weight_t'(w_tgt[i]), $sformatf("weight %0d programmed", i));
      // wave
      for (int i = 0; i < P; i++) t_in[i] = ($urandom_range(3) != 0) ? NONE : $urandom_range(7);
      t_fire = NONE;
      for (int t = 0; t < 15 && t_fire == NONE; t++) begin
        pot = 0;
        for (int i = 0; i < P; i++)
          if (t_in[i] != NONE && t >= t_in[i]) pot += (t - t_in[i] + 1 < w_tgt[i]) ? t - t_in[i] + 1 : w_tgt[i];
        if (pot >= int'(theta)) t_fire = t;
      end
      for (int t = 0; t < 15; t++) begin
        @(negedge aclk);
        for (int i = 0; i < P; i++) x[i] = (t_in[i] != NONE) && t >= t_in[i] && t < t_in[i] + 8;
        #1;
        if (t_fire == NONE || t < t_fire)
          check(spike == 1'b0, $sformatf("round %0d t=%0d early spike (t_fire=%0d)", round, t, t_fire));
        else if (t < t_fire + 8)
          check(spike == 1'b1, $sformatf("round %0d t=%0d spike missing (t_fire=%0d)", round, t, t_fire));
      end
      @(negedge aclk); x = '0;
      if (t_fire == NONE) n_silent++; else n_fired++;
      strobe();
      for (int i = 0; i < P; i++)
        check(weights[i] == weight_t'(w_tgt[i]), $sformatf("weight %0d restored", i));
    end
    check(n_fired > 5 && n_silent > 5, $sformatf("fired %0d silent %0d", n_fired, n_silent));
    $display("waves fired=%0d silent=%0d", n_fired, n_silent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60 * 60) @(posedge aclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
