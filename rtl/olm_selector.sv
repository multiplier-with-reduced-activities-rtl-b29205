// olm_selector -- SELECTOR: multiplies an operand prefix by a signed digit.
//
// A 4-to-1 multiplexer driven by the two bits of the digit: {pos,neg} = 10
// passes the operand, 01 passes its bitwise complement and raises the
// carry-in (so complement + carry is the exact negative), 00 and 11 give 0.
// The carry is added at the least significant position of the [4:2] adder
// (cx / cy in the block diagram). Combinational.
module olm_selector
  import olm_pkg::*;
#(
  parameter int W = 12
) (
  input  logic [W-1:0] a,
  input  sd_digit_t    d,
  output logic [W-1:0] o,
  output logic         cin
);
  always_comb begin
    unique case ({d.pos, d.neg})
      2'b10:   begin o = a;   cin = 1'b0; end
      2'b01:   begin o = ~a;  cin = 1'b1; end
      default: begin o = '0;  cin = 1'b0; end
    endcase
  end
endmodule
