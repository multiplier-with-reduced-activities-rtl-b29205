// tb_olm_adder42 -- random test of the [4:2] carry-save adder for W = 10:
// s + c must equal a + b + e + f + cin0 + cin1 modulo 2^W.
module tb_olm_adder42;
  localparam int W = 10;
  logic [W-1:0] a, b, e, f, s, c;
  logic         cin0, cin1;
  int checks = 0, failures = 0;

  olm_adder42 #(.W(W)) dut (.a(a), .b(b), .e(e), .f(f), .cin0(cin0), .cin1(cin1), .s(s), .c(c));

  initial begin
    for (int i = 0; i < 20000; i++) begin
      logic [W-1:0] exp;
      a = W'($urandom); b = W'($urandom); e = W'($urandom); f = W'($urandom);
      cin0 = 1'($urandom); cin1 = 1'($urandom);
      if (i < 4) begin  // all-ones corner
        a = '1; b = '1; e = '1; f = '1; cin0 = i[0]; cin1 = i[1];
      end
      #1;
      exp = a + b + e + f + W'(cin0) + W'(cin1);
      checks++;
      if (W'(s + c) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL %h %h %h %h %b %b: s+c=%h expected %h", a, b, e, f, cin0, cin1, W'(s + c), exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
