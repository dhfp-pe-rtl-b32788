// exp_compare_s2: second half of the three-input EC+LUT exponent comparator
// (stage S2 of the PE, "exponent comparison S II").
//
// A small lookup table indexed by the sign bits of the three EC differences
// (E1-Ec, E0-Ec, E1-E0) selects which term has the largest exponent and how
// each alignment offset is obtained from the stored differences (taken as is,
// negated, or zero). Outputs are the maximum exponent (Max1) and the
// non-negative offsets Diff_0, Diff_1 and Diff_Ec that the alignment shifter
// applies to the lane-0 product, lane-1 product and addend. The LUT contents
// are derived here; ties go to E1, then E0. Combinational.
module exp_compare_s2
  import dhfp_pkg::*;
(
  input  logic signed [EXP_W-1:0] e0,
  input  logic signed [EXP_W-1:0] e1,
  input  logic signed [EXP_W-1:0] ec,
  input  logic signed [EXP_W-1:0] d1c,
  input  logic signed [EXP_W-1:0] d0c,
  input  logic signed [EXP_W-1:0] d10,
  output logic signed [EXP_W-1:0] max_exp,
  output logic [EXP_W-1:0]        diff0,
  output logic [EXP_W-1:0]        diff1,
  output logic [EXP_W-1:0]        diffc
);

  typedef enum logic [1:0] {SEL_E0, SEL_E1, SEL_EC} sel_e;
  sel_e sel;

  // LUT: index {E1<Ec, E0<Ec, E1<E0}
  always_comb begin
    case ({d1c[EXP_W-1], d0c[EXP_W-1], d10[EXP_W-1]})
      3'b000: sel = SEL_E1;  // E1>=Ec, E0>=Ec, E1>=E0
      3'b001: sel = SEL_E0;  // E0 > E1 >= Ec
      3'b010: sel = SEL_E1;  // E1 >= Ec > E0
      3'b011: sel = SEL_E0;  // impossible, E0 > E1 >= Ec > E0
      3'b100: sel = SEL_EC;  // impossible, Ec > E1 >= E0 >= Ec
      3'b101: sel = SEL_E0;  // E0 >= Ec > E1
      3'b110: sel = SEL_EC;  // Ec > E1 >= E0
      default: sel = SEL_EC; // Ec > E0 > E1
    endcase
    case (sel)
      SEL_E1: begin
        max_exp = e1; diff0 = d10;  diff1 = '0;   diffc = d1c;
      end
      SEL_E0: begin
        max_exp = e0; diff0 = '0;   diff1 = -d10; diffc = d0c;
      end
      default: begin
        max_exp = ec; diff0 = -d0c; diff1 = -d1c; diffc = '0;
      end
    endcase
  end

endmodule
