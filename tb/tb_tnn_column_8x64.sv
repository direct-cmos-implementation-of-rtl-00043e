// tb_tnn_column_8x64: end-to-end test of the TNN column at the small 8x64 configuration (64 inputs, 8 neurons).
//
// Every wave presents input spikes (8-cycle pulses starting on cycles 0..7 of
// the wave, many inputs silent), then asserts the gamma strobe on cycle 15 with
// a fresh set of random STDP bits. A reference model written independently of
// the RTL computes, from the weights it keeps itself:
//   - each neuron's membrane potential cycle by cycle (ramp-no-leak: synapse i
//     adds one per cycle for w_i cycles from its spike), firing when it reaches
//     theta, restart from zero after a firing, 8-cycle output pulses;
//   - winner-take-all: only neurons whose first spike starts on the earliest
//     cycle pass, and among them the lowest index;
//   - the STDP case of every synapse from input time and winner time, the
//     stabiliser F(w) and the resulting saturating weight change.
// Raw neuron spikes and winner outputs are compared on every cycle and all
// weights after every update. The test counts how often each mechanism
// happened (firing, inhibition of a later neuron, tie broken by index, the
// four STDP cases changing a weight, saturation at 0 and 7, waves with no
// winner) and counts a failure for any that never happened.
module tb_tnn_column_8x64;
  import tnn_pkg::*;
  localparam int P = 64;
  localparam int Q = 8;
  localparam int ACC_W = $clog2(P) + 1;
  localparam int W0 = 3;
  localparam int WAVES = 200;
  localparam int NONE = 99;

  logic aclk = 1'b0, rst = 1'b1, gclk = 1'b0;
  logic [P-1:0] x = '0;
  logic [ACC_W-1:0] theta;
  brv_t brv = '0;
  logic [Q-1:0] z_raw, z;

  tnn_column #(.P(P), .Q(Q), .W_INIT(weight_t'(W0))) dut (.*);

  always #5 aclk = ~aclk;

  int checks = 0, failures = 0;
  int n_fire = 0, n_inhib = 0, n_tie = 0, n_nowin = 0, n_sat = 0;
  int n_case [4];
  int wm [Q][P];        // model weights
  int t_in [P];
  bit raw [Q][16];
  bit zo [Q][16];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Raw spike trains of all neurons for one wave.
  task automatic model_neurons();
    for (int j = 0; j < Q; j++) begin
      int pot, left;
      pot = 0; left = 0;
      for (int t = 0; t < 15; t++) begin
        int ups;
        bit f;
        ups = 0;
        for (int i = 0; i < P; i++)
          if (t_in[i] != NONE && t >= t_in[i] && t < t_in[i] + wm[j][i]) ups++;
        f = (pot + ups >= int'(theta));
        raw[j][t] = f || left > 0;
        if (f) pot = 0; else pot += ups;
        if (left > 0) left--;
        else if (f) left = 7;
      end
    end
  endtask

  task automatic model_wta(output int tz [Q]);
    int first [Q];
    int tmin, nmin;
    tmin = NONE; nmin = 0;
    for (int j = 0; j < Q; j++) begin
      first[j] = NONE;
      for (int t = 14; t >= 0; t--) if (raw[j][t]) first[j] = t;
      if (first[j] != NONE) n_fire++;
      if (first[j] < tmin) begin tmin = first[j]; nmin = 1; end
      else if (first[j] == tmin && tmin != NONE) nmin++;
    end
    if (nmin > 1) n_tie++;
    if (tmin == NONE) n_nowin++;
    for (int t = 0; t < 15; t++) begin
      bit lower;
      lower = 0;
      for (int j = 0; j < Q; j++) begin
        bit passed;
        passed = raw[j][t] && first[j] == tmin;
        zo[j][t] = passed && !lower;
        lower |= passed;
      end
    end
    for (int j = 0; j < Q; j++) begin
      tz[j] = NONE;
      for (int t = 14; t >= 0; t--) if (zo[j][t]) tz[j] = t;
      if (first[j] != NONE && tz[j] == NONE) n_inhib++;
    end
  endtask

  task automatic model_stdp(input int tz [Q]);
    for (int j = 0; j < Q; j++)
      for (int i = 0; i < P; i++) begin
        bit xe, ze, le, s, inc, dec;
        int c;
        xe = t_in[i] != NONE;
        ze = tz[j] != NONE;
        le = xe && (!ze || t_in[i] <= tz[j]);
        s = brv.min || (wm[j][i] >= 1 && wm[j][i] <= 6 && brv.stab[wm[j][i] - 1]);
        c = !(xe || ze) ? -1 : (xe && ze) ? (le ? 0 : 1) : (le ? 2 : 3);
        inc = (c == 0 && brv.capture && s) || (c == 2 && brv.search);
        dec = (c == 1 && brv.minus && s)   || (c == 3 && brv.backoff && s);
        if (inc || dec) n_case[c]++;
        if ((inc && wm[j][i] == 7) || (dec && wm[j][i] == 0)) n_sat++;
        if (inc && wm[j][i] < 7) wm[j][i]++;
        if (dec && wm[j][i] > 0) wm[j][i]--;
      end
  endtask

  initial begin
    int tz [Q];
    theta = ACC_W'(24);
    for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++) wm[j][i] = W0;
    repeat (2) @(negedge aclk);
    rst = 1'b0;
    for (int wave = 0; wave < WAVES; wave++) begin
      // every tenth wave carries no spikes at all
      for (int i = 0; i < P; i++) t_in[i] = ($urandom_range(3) != 0 || wave % 10 == 9) ? NONE : $urandom_range(7);
      model_neurons();
      model_wta(tz);
      for (int t = 0; t < 15; t++) begin
        @(negedge aclk);
        for (int i = 0; i < P; i++) x[i] = (t_in[i] != NONE) && t >= t_in[i] && t < t_in[i] + 8;
        #1;
        for (int j = 0; j < Q; j++) begin
          check(z_raw[j] == raw[j][t], $sformatf("wave %0d t=%0d neuron %0d raw spike %0b exp %0b", wave, t, j, z_raw[j], raw[j][t]));
          check(z[j] == zo[j][t], $sformatf("wave %0d t=%0d neuron %0d WTA out %0b exp %0b", wave, t, j, z[j], zo[j][t]));
        end
      end
      // gamma strobe: weights update with this wave's random bits
      @(negedge aclk);
      x = '0; gclk = 1'b1;
      brv = brv_t'($urandom);
      if (wave % 25 == 24) theta = ACC_W'(12 + $urandom_range(40));  // loaded by this strobe
      model_stdp(tz);
      @(negedge aclk);
      gclk = 1'b0;
      for (int j = 0; j < Q; j++)
        for (int i = 0; i < P; i++)
          check(int'(dut.w[j][i]) == wm[j][i], $sformatf("wave %0d weight[%0d][%0d]=%0d exp %0d", wave, j, i, dut.w[j][i], wm[j][i]));
    end
    check(n_fire > 0, "no neuron fired");
    check(n_inhib > 0, "WTA never inhibited a later neuron");
    check(n_tie > 0, "no tie was broken by index");
    check(n_nowin > 0, "no wave without a winner");
    check(n_sat > 0, "weight saturation never exercised");
    for (int c = 0; c < 4; c++) check(n_case[c] > 0, $sformatf("STDP case %0d never changed a weight", c + 1));
    $display("fires=%0d inhibited=%0d ties=%0d no-winner=%0d saturations=%0d cases=%0d/%0d/%0d/%0d",
             n_fire, n_inhib, n_tie, n_nowin, n_sat, n_case[0], n_case[1], n_case[2], n_case[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WAVES * 20 + 100) @(posedge aclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
