// unit_multiplier: the bit-partitioned 4-bit unit multiplier of the PE.
//
// P = sum over i,j of delta_m(i,j) * a_i * b_j * 2^(i+j). With split = 0
// (FP8) every partial product is enabled and p is the unsigned 4x4 product.
// With split = 1 (dual FP4) the partial products that cross the two 2-bit
// halves (i in one half, j in the other) are masked off, so the same array
// yields two independent 2x2 products: p[7:4] = a[3:2]*b[3:2] and
// p[3:0] = a[1:0]*b[1:0]. Each half-product is at most 9 and fits its nibble,
// so no carry crosses the halves. The mask and weighting follow the paper;
// the final summation of the weighted partial products is left to synthesis.
// Combinational.
module unit_multiplier #(
  parameter int unsigned N = 4
) (
  input  logic           split,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  always_comb begin
    p = '0;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        // delta_m(i,j): in split mode only same-half partial products count
        if (!split || ((i < N/2) == (j < N/2)))
          p = p + ((2*N)'(a[i] & b[j]) << (i + j));
      end
    end
  end

endmodule
