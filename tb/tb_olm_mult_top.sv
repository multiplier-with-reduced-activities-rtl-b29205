// tb_olm_mult_top -- end-to-end test of the pipelined online multiplier at
// its default size (N = 8, p = 7), driven and checked by olm_tb_harness:
// directed extreme operands, a burst of 8 back-to-back operations whose
// cycle count must be (N+DELTA+1)+(8-1) = 19, and 3000 random operations
// with bubbles, each product checked to be within one unit in the last place.
module tb_olm_mult_top;
  import olm_pkg::*;
  localparam int N = 8;  // must equal the default of olm_mult_top

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              rst_n, in_valid, out_valid, done;
  logic [$clog2(N+1)-1:0] prec_in;
  sd_digit_t [N-1:0] x_in, y_in, z_out, z_msdf;
  logic      [N-1:0] z_msdf_valid;
  int                checks, failures, burst_cycles;

  olm_mult_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in), .y_in(y_in), .prec_in(prec_in),
    .out_valid(out_valid), .z_out(z_out), .z_msdf(z_msdf), .z_msdf_valid(z_msdf_valid)
  );

  olm_tb_harness #(.N(N), .NOPS(3000), .K(8), .SEED(7)) u_h (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in), .y_in(y_in), .prec_in(prec_in),
    .out_valid(out_valid), .z_out(z_out), .z_msdf(z_msdf), .z_msdf_valid(z_msdf_valid),
    .done(done), .checks(checks), .failures(failures), .burst_cycles(burst_cycles)
  );

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
