// tb_olm_stage -- tests olm_stage (N = 8) in each of its forms:
// initialization (J = -3, -1), recurrence (J = 0, 2, 3, 4: 3 and 4 lie
// where the working precision is capped and operand bits are dropped) and
// the last DELTA iterations (J = 5, 7).
module tb_olm_stage;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NI = 8;
  localparam int JS[NI] = '{-3, -1, 0, 2, 3, 4, 5, 7};
  logic [NI-1:0] done;
  int ck[NI], fl[NI];

  for (genvar i = 0; i < NI; i++) begin : g_chk
    olm_tb_stage_check #(.N(8), .J(JS[i])) u_c (.clk(clk), .done(done[i]), .checks(ck[i]), .failures(fl[i]));
  end

  initial begin
    int c, f;
    wait (&done);
    c = 0; f = 0;
    for (int i = 0; i < NI; i++) begin c += ck[i]; f += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
