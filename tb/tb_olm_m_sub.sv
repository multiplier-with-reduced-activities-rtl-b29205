// tb_olm_m_sub -- exhaustive test of M: for every estimate v_hat (quarters)
// and digit z, w_top must be the low 3 bits of v_hat - 4z.
module tb_olm_m_sub;
  import olm_pkg::*;
  logic [3:0] vh;
  logic [2:0] w;
  sd_digit_t  z;
  int checks = 0, failures = 0;

  olm_m_sub dut (.v_low(vh[2:0]), .z(z), .w_top(w));

  initial begin
    for (int q = -8; q <= 7; q++) begin
      for (int c = 0; c < 4; c++) begin
        int dv;
        logic [3:0] exp;
        vh = 4'(q);
        z  = '{pos: c[1], neg: c[0]};
        dv = int'(c[1]) - int'(c[0]);
        #1;
        exp = 4'(q - 4 * dv);
        checks++;
        if (w != exp[2:0]) begin
          failures++; $display("FAIL v_hat=%0d z=%0d: %b expected %b", q, dv, w, exp[2:0]);
        end
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
