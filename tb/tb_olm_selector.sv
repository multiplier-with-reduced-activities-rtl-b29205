// tb_olm_selector -- exhaustive test of the digit multiplexer for W = 8:
// o + cin must equal d*a modulo 2^W for every a and every digit code.
module tb_olm_selector;
  import olm_pkg::*;
  localparam int W = 8;
  logic [W-1:0] a, o;
  logic         cin;
  sd_digit_t    d;
  int checks = 0, failures = 0;

  olm_selector #(.W(W)) dut (.a(a), .d(d), .o(o), .cin(cin));

  initial begin
    for (int v = 0; v < (1 << W); v++) begin
      for (int c = 0; c < 4; c++) begin
        logic [W-1:0] got, exp;
        int dv;
        a  = W'(v);
        d  = '{pos: c[1], neg: c[0]};
        dv = int'(c[1]) - int'(c[0]);
        #1;
        got = o + W'(cin);
        exp = W'(dv * v);
        checks++;
        if (got != exp) begin
          failures++; $display("FAIL a=%0d d=%0d: got %0d expected %0d", v, dv, got, exp);
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
