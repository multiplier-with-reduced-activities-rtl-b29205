// olm_adder42 -- [4:2] carry-save adder of the residual recurrence.
//
// Adds four W-bit two's complement vectors and two carry-ins modulo 2^W and
// leaves the result in carry-save form: s + c == a + b + e + f + cin0 + cin1
// (mod 2^W). Built as two rows of full adders; cin0 enters the free least
// significant position of the first carry row and cin1 that of the second,
// so the step time does not depend on W. Combinational.
module olm_adder42 #(
  parameter int W = 12
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] e,
  input  logic [W-1:0] f,
  input  logic         cin0,
  input  logic         cin1,
  output logic [W-1:0] s,
  output logic [W-1:0] c
);
  logic [W-1:0] s1, c1, c1s, c2;
  always_comb begin
    s1  = a ^ b ^ e;
    c1  = (a & b) | (a & e) | (b & e);
    c1s = {c1[W-2:0], cin0};
    s   = s1 ^ c1s ^ f;
    c2  = (s1 & c1s) | (s1 & f) | (c1s & f);
    c   = {c2[W-2:0], cin1};
  end
endmodule
