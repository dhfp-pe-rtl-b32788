// mantissa_normalization: mantissa normaliser of stage S5 of the PE.
//
// Takes the ACC_W-bit two's-complement sum from the carry-select adder,
// splits it into a sign and an (ACC_W-1)-bit magnitude (the magnitude of a
// sum of three window terms always fits), hands the magnitude to the
// leading-zero unit and left-shifts it by the returned count so that the
// leading one lands on the MSB. Bits below that are the mantissa candidates
// that sem_combination truncates to the output format. Combinational.
module mantissa_normalization #(
  parameter int unsigned ACC_W = 15,
  parameter int unsigned LZ_W  = $clog2(ACC_W)
) (
  input  logic [ACC_W-1:0] acc,
  input  logic [LZ_W-1:0]  lz,
  output logic             neg,
  output logic [ACC_W-2:0] mag,
  output logic [ACC_W-2:0] norm
);

  logic [ACC_W-1:0] abs_v;

  always_comb begin
    neg   = acc[ACC_W-1];
    abs_v = neg ? (~acc + 1'b1) : acc;
    mag   = abs_v[ACC_W-2:0];
    norm  = mag << lz;
  end

endmodule
