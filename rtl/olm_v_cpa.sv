// olm_v_cpa -- V: estimate of the residual for digit selection.
//
// Adds the ib + t = 4 most significant bits of the sum and carry vectors of
// v[j] (2 integer, 2 fractional bits) in a short carry-propagate adder,
// modulo 16. The result v_hat is two's complement in quarters, range
// [-2, 7/4]; it is at most 1/2 below the exact v[j]. Combinational.
module olm_v_cpa
  import olm_pkg::*;
(
  input  logic [EST_W-1:0] s_top,
  input  logic [EST_W-1:0] c_top,
  output logic [EST_W-1:0] v_hat
);
  assign v_hat = s_top + c_top;
endmodule
