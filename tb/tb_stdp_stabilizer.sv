// tb_stdp_stabilizer: checks the stabiliser for every weight against random
// random-bit vectors: output = brv.min OR (w in 1..6 ? brv.stab[w-1] : 0).
module tb_stdp_stabilizer;
  import tnn_pkg::*;

  logic aclk = 1'b0;
  weight_t w;
  brv_t brv;
  logic stab;
  int checks = 0, failures = 0;

  stdp_stabilizer dut (.*);

  always #5 aclk = ~aclk;

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic exp_s;
      @(negedge aclk);
      w = weight_t'($urandom_range(7));
      brv = brv_t'($urandom);
      #1;
      exp_s = brv.min;
      if (w >= 1 && w <= 6) exp_s |= brv.stab[int'(w) - 1];
      checks++;
      if (stab != exp_s) begin
        failures++;
        $display("FAIL: w=%0d brv=%b stab=%0b exp %0b", w, brv, stab, exp_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge aclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
