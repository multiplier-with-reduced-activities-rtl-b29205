// olm_ca_append -- append logic of a conversion-append register (CA-REG).
//
// On-the-fly conversion of a signed-digit operand, most significant digit
// first, into two's complement. The register pair holds Q = x[j] and
// QM = x[j] - 2^-L, both with one sign bit and L fractional bits. Appending
// digit d of weight 2^-(L+1):
//   d = +1 : Q' = Q.1   QM' = Q.0
//   d =  0 : Q' = Q.0   QM' = QM.1
//   d = -1 : Q' = QM.1  QM' = QM.0
// so no carry ever propagates. Purely combinational; the registers live in
// the pipeline stage. The paper names the CA-REG and the on-the-fly
// converter; the rules above are the standard conversion.
module olm_ca_append
  import olm_pkg::*;
#(
  parameter int L = 4  // fractional bits before the append
) (
  input  logic [L:0]   q,
  input  logic [L:0]   qm,
  input  sd_digit_t    d,
  output logic [L+1:0] q_next,
  output logic [L+1:0] qm_next
);
  always_comb begin
    unique case ({d.pos, d.neg})
      2'b10: begin  // +1
        q_next  = {q, 1'b1};
        qm_next = {q, 1'b0};
      end
      2'b01: begin  // -1
        q_next  = {qm, 1'b1};
        qm_next = {qm, 1'b0};
      end
      default: begin  // 0
        q_next  = {q, 1'b0};
        qm_next = {qm, 1'b1};
      end
    endcase
  end
endmodule
