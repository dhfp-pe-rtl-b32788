// lza: leading-zero unit of stage S5 of the PE.
//
// Counts the leading zeros of the W-bit result magnitude; an all-zero input
// gives W. The count sets both the normalising left shift of the mantissa and
// the exponent correction. It works on the adder result itself, an exact
// leading-zero counter rather than an anticipator that predicts the count
// from the adder inputs (the source names the unit an anticipator but
// describes it as counting leading zeros of the result). Combinational.
module lza #(
  parameter int unsigned W    = 14,
  parameter int unsigned LZ_W = $clog2(W + 1)
) (
  input  logic [W-1:0]    x,
  output logic [LZ_W-1:0] lz
);

  always_comb begin
    lz = LZ_W'(W);
    for (int i = 0; i < W; i++)
      if (x[i]) lz = LZ_W'(W - 1 - i);
  end

endmodule
