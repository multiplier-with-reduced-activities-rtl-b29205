// olm_m_sub -- M: subtracts the selected digit from the residual estimate.
//
// w[j+1] = v[j] - z_{j+1}. The digit has weight 1, i.e. 4 quarters, and
// only acts on the estimate bits, which replace the top of the sum vector
// (the carry vector's top bits are cleared). After the doubling to 2w[j+1]
// the most significant estimate bit drops out, so 3 bits remain:
// (v_hat - 4z)[2:0], i.e. bit 2 toggles when z is nonzero and bits 1:0
// pass. Combinational.
module olm_m_sub
  import olm_pkg::*;
(
  input  logic [2:0] v_low,  // v_hat[2:0]
  input  sd_digit_t  z,
  output logic [2:0] w_top   // (v_hat - 4z)[2:0]
);
  logic nz;
  assign nz    = z.pos ^ z.neg;
  assign w_top = {v_low[2] ^ nz, v_low[1:0]};
endmodule
