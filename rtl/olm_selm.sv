// olm_selm -- SELM: output digit selection of the radix-2 online multiplier.
//
//   z = +1  if  1/2 <= v_hat <= 7/4
//   z =  0  if -1/2 <= v_hat <= 1/4
//   z = -1  if  -2  <= v_hat <= -3/4
// v_hat is 4-bit two's complement in quarters (b3 b2 . b1 b0). The rule
// depends only on b3 b2 b1, which is why the selection takes 3 bits:
//   z = +1 when b3 = 0 and (b2 or b1);  z = -1 when b3 = 1 and not (b2 and b1).
// Combinational.
module olm_selm
  import olm_pkg::*;
(
  input  logic [2:0] v3,  // v_hat[3:1]
  output sd_digit_t  z
);
  always_comb begin
    z.pos = ~v3[2] & (v3[1] | v3[0]);
    z.neg =  v3[2] & ~(v3[1] & v3[0]);
  end
endmodule
