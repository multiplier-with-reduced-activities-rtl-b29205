// olm_delay_line -- D-cycle shift register for W-bit data (D = 0: a wire).
// Used to skew operand digits into the stages and to align product digits.
module olm_delay_line #(
  parameter int W = 2,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r[D];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < D; i++) r[i] <= r[i-1];
    end
    assign q = r[D-1];
  end
endmodule
