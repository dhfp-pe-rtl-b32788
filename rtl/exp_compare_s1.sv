// exp_compare_s1: first half of the three-input EC+LUT exponent comparator
// (stage S1 of the PE, "exponent comparison S I").
//
// Forms the exponents of the three terms of the sum: E0 and E1 are the product
// exponents Ea+Eb of lanes 0 and 1 (lane 1 is empty in FP8 mode) and Ec is the
// addend exponent. A zero term gets EXP_ZERO so it never becomes the maximum.
// Three parallel EC subtractors then compute the pairwise differences
// E1-Ec, E0-Ec and E1-E0, the operand pairing drawn for the EC blocks of the
// comparator. The sign pattern of the differences drives the LUT of stage S2
// (exp_compare_s2). Combinational; the registers are in dhfp_pe.
module exp_compare_s1
  import dhfp_pkg::*;
(
  input  operand_t dec_a,
  input  operand_t dec_b,
  input  operand_t dec_c,
  output logic signed [EXP_W-1:0] e0,
  output logic signed [EXP_W-1:0] e1,
  output logic signed [EXP_W-1:0] ec,
  output logic signed [EXP_W-1:0] d1c,
  output logic signed [EXP_W-1:0] d0c,
  output logic signed [EXP_W-1:0] d10
);

  logic signed [EXP_W-1:0] ea0, ea1, eb0, eb1, ec0;

  always_comb begin
    ea0 = dec_a.exp[0];
    ea1 = dec_a.exp[1];
    eb0 = dec_b.exp[0];
    eb1 = dec_b.exp[1];
    ec0 = dec_c.exp[0];
    e0 = (dec_a.zero[0] || dec_b.zero[0]) ? EXP_ZERO : ea0 + eb0;
    e1 = (dec_a.zero[1] || dec_b.zero[1]) ? EXP_ZERO : ea1 + eb1;
    ec = dec_c.zero[0] ? EXP_ZERO : ec0;
    // EC blocks
    d1c = e1 - ec;
    d0c = e0 - ec;
    d10 = e1 - e0;
  end

endmodule
