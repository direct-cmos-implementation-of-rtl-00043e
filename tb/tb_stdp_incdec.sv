// tb_stdp_incdec: checks inc/dec for every one-hot (or empty) case vector and
// every combination of the random bits that matter, against the update table.
module tb_stdp_incdec;
  import tnn_pkg::*;

  logic [3:0] cases;
  logic stab;
  brv_t brv;
  logic inc, dec;
  int checks = 0, failures = 0;

  stdp_incdec dut (.*);

  initial begin
    for (int c = 0; c < 5; c++) begin
      for (int r = 0; r < 32; r++) begin
        logic e_inc, e_dec;
        cases = (c < 4) ? 4'(1 << c) : 4'b0;
        brv = '0;
        {brv.capture, brv.minus, brv.search, brv.backoff, stab} = 5'(r);
        brv.min = r[0]; brv.stab = 6'(r * 7);
        #1;
        case (c)
          0: begin e_inc = brv.capture & stab; e_dec = 1'b0; end
          1: begin e_inc = 1'b0; e_dec = brv.minus & stab; end
          2: begin e_inc = brv.search; e_dec = 1'b0; end
          3: begin e_inc = 1'b0; e_dec = brv.backoff & stab; end
          default: begin e_inc = 1'b0; e_dec = 1'b0; end
        endcase
        checks++;
        if (inc != e_inc || dec != e_dec) begin
          failures++;
          $display("FAIL: case %0d r=%0d inc=%0b dec=%0b exp %0b %0b", c + 1, r, inc, dec, e_inc, e_dec);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
