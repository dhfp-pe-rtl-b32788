// sign_processing: sign path of stage S1 of the PE.
//
// The sign of each lane product is the XOR of the operand signs, as the PE
// description states; the addend sign is passed on. This unit also resolves
// the special-value outcome of the FP8 operation from the S0 flags, using the
// IEEE 754 rules (this design's choice; the source only says specials are
// detected early): any NaN input, Inf*0, or Inf plus an Inf of the other sign
// gives NaN; otherwise an infinite operand gives an infinite result with the
// sign of the infinite term. FP4 formats have no special values.
// Combinational.
module sign_processing
  import dhfp_pkg::*;
(
  input  operand_t   dec_a,
  input  operand_t   dec_b,
  input  operand_t   dec_c,
  output logic [1:0] sp,
  output logic       sc,
  output logic       res_nan,
  output logic       res_inf,
  output logic       inf_sign
);

  logic prod_inf, prod_nan;

  always_comb begin
    sp = dec_a.sign ^ dec_b.sign;
    sc = dec_c.sign[0];
    prod_nan = dec_a.nan || dec_b.nan
            || (dec_a.inf && dec_b.zero[0]) || (dec_a.zero[0] && dec_b.inf);
    prod_inf = (dec_a.inf || dec_b.inf) && !prod_nan;
    res_nan  = prod_nan || dec_c.nan || (prod_inf && dec_c.inf && (sp[0] != sc));
    res_inf  = !res_nan && (prod_inf || dec_c.inf);
    inf_sign = prod_inf ? sp[0] : sc;
  end

endmodule
