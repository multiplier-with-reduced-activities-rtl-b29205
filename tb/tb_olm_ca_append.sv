// tb_olm_ca_append -- exhaustive test of the on-the-fly conversion append:
// for every prefix Q in (-1,1) with L = 4 fractional bits, QM = Q - 2^-L,
// and every digit code, Q' must equal Q + d*2^-(L+1) and QM' = Q' - 2^-(L+1).
module tb_olm_ca_append;
  import olm_pkg::*;
  localparam int L = 4;
  logic [L:0]   q, qm;
  logic [L+1:0] qn, qmn;
  sd_digit_t    d;
  int checks = 0, failures = 0;

  olm_ca_append #(.L(L)) dut (.q(q), .qm(qm), .d(d), .q_next(qn), .qm_next(qmn));

  initial begin
    for (int v = -(1 << L) + 1; v < (1 << L); v++) begin
      for (int c = 0; c < 4; c++) begin
        int dv, exp_q, exp_qm;
        q  = (L+1)'(v);
        qm = (L+1)'(v - 1);
        d  = '{pos: c[1], neg: c[0]};
        dv = int'(c[1]) - int'(c[0]);
        #1;
        exp_q  = 2 * v + dv;
        exp_qm = exp_q - 1;
        checks += 2;
        if (int'($signed(qn)) != exp_q) begin
          failures++; $display("FAIL q=%0d d=%0d: q_next=%0d expected %0d", v, dv, $signed(qn), exp_q);
        end
        if (int'($signed(qmn)) != exp_qm) begin
          failures++; $display("FAIL q=%0d d=%0d: qm_next=%0d expected %0d", v, dv, $signed(qmn), exp_qm);
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
