// tb_olm_selm -- exhaustive test of the selection function: for every 4-bit
// estimate v_hat in quarters (-8..7 = -2..7/4), the digit must follow
//   +1 for 1/2..7/4,  0 for -1/2..1/4,  -1 for -2..-3/4.
module tb_olm_selm;
  import olm_pkg::*;
  logic [3:0] vh;
  sd_digit_t  z;
  int checks = 0, failures = 0;

  olm_selm dut (.v3(vh[3:1]), .z(z));

  initial begin
    for (int q = -8; q <= 7; q++) begin
      int exp, got;
      vh = 4'(q);
      #1;
      exp = (q >= 2) ? 1 : ((q >= -2) ? 0 : -1);
      got = int'(z.pos) - int'(z.neg);
      checks += 2;
      if (got != exp) begin
        failures++; $display("FAIL v_hat=%0d/4: z=%0d expected %0d", q, got, exp);
      end
      if (z.pos && z.neg) begin
        failures++; $display("FAIL v_hat=%0d/4: code 11", q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
