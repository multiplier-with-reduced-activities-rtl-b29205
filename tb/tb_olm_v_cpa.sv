// tb_olm_v_cpa -- exhaustive test of the 4-bit estimate adder:
// v_hat must be (s_top + c_top) mod 16 for all 256 input pairs.
module tb_olm_v_cpa;
  import olm_pkg::*;
  logic [EST_W-1:0] s, c, v;
  int checks = 0, failures = 0;

  olm_v_cpa dut (.s_top(s), .c_top(c), .v_hat(v));

  initial begin
    for (int i = 0; i < 16; i++) begin
      for (int k = 0; k < 16; k++) begin
        s = 4'(i); c = 4'(k);
        #1;
        checks++;
        if (int'(v) != (i + k) % 16) begin
          failures++; $display("FAIL %0d + %0d = %0d", i, k, v);
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
