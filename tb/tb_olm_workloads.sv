// tb_olm_workloads -- the operand sizes n = 16, 24 and 32 next to the
// default n = 8: one multiplier per size, each taking a burst of k = 8
// back-to-back operations (expected (n+4)+(8-1) = 27, 35, 43 cycles from
// the first input to the last product) and a random stream with bubbles,
// every product checked to within one unit in the last place.
module tb_olm_workloads;
  import olm_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NW = 3;
  localparam int NS[NW] = '{16, 24, 32};
  logic [NW-1:0] done;
  int ck[NW], fl[NW], bc[NW];

  for (genvar w = 0; w < NW; w++) begin : g_w
    localparam int N = NS[w];
    logic              rst_n, in_valid, out_valid;
    logic [$clog2(N+1)-1:0] prec_in;
    sd_digit_t [N-1:0] x_in, y_in, z_out, z_msdf;
    logic      [N-1:0] z_msdf_valid;

    olm_mult_top #(.N(N)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in), .y_in(y_in), .prec_in(prec_in),
      .out_valid(out_valid), .z_out(z_out), .z_msdf(z_msdf), .z_msdf_valid(z_msdf_valid)
    );
    olm_tb_harness #(.N(N), .NOPS(2000), .K(8), .SEED(11 + w)) u_h (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in), .y_in(y_in), .prec_in(prec_in),
      .out_valid(out_valid), .z_out(z_out), .z_msdf(z_msdf), .z_msdf_valid(z_msdf_valid),
      .done(done[w]), .checks(ck[w]), .failures(fl[w]), .burst_cycles(bc[w])
    );
  end

  initial begin
    int c, f;
    wait (&done);
    c = 0; f = 0;
    for (int w = 0; w < NW; w++) begin
      c += ck[w]; f += fl[w];
      $display("n=%0d: k=8 burst took %0d cycles", NS[w], bc[w]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
