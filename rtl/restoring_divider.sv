// restoring_divider: unsigned division by repeated subtraction, one
// shift-and-subtract step per quotient bit, all in one combinational path.
//
// quotient = dividend / divisor and remainder = dividend % divisor for
// divisor != 0; a zero divisor gives an all-ones quotient and the dividend as
// remainder. The design computes its centre-of-gravity division this way and
// clocks it at the slow clock, whose long period leaves room for the
// DW-stage subtract chain.
module restoring_divider #(
  parameter int unsigned DW = 32,   // dividend and quotient width
  parameter int unsigned VW = 16    // divisor and remainder width
) (
  input  logic [DW-1:0] dividend,
  input  logic [VW-1:0] divisor,
  output logic [DW-1:0] quotient,
  output logic [VW-1:0] remainder
);

  always_comb begin
    logic [VW:0] rem;
    rem      = '0;
    quotient = '0;
    for (int i = DW - 1; i >= 0; i--) begin
      rem = {rem[VW-1:0], dividend[i]};
      if (rem >= {1'b0, divisor}) begin
        rem         = rem - {1'b0, divisor};
        quotient[i] = 1'b1;
      end
    end
    remainder = rem[VW-1:0];
  end

endmodule
