// sem_combination: "sign, exponent, mantissa combination" of stage S5.
//
// Builds the output code of the current format from the normaliser results.
// The mantissa field is the bits just below the leading one of the normalised
// magnitude, first shifted right by sub_shift for a subnormal result, and cut
// to the format's width: the PE truncates, it never rounds. A result beyond
// the largest finite value saturates to it (for E4M3 that includes the
// S.1111.111 code, which is NaN). A zero magnitude gives +0; the special-value
// flags from the sign path override everything (NaN = 0x7F, E5M2 infinity =
// 0x7C/0xFC). FP8 codes fill y; an FP4 code sits in y[3:0] with y[7:4] = 0.
// Saturation, NaN code and zero sign are this design's choices.
// Combinational.
module sem_combination
  import dhfp_pkg::*;
#(
  parameter int unsigned W    = 14,
  parameter int unsigned LZ_W = $clog2(W + 1)
) (
  input  mode_e           mode,
  input  logic            neg,
  input  logic [W-1:0]    norm,
  input  logic            is_zero,
  input  logic [4:0]      exp_field,
  input  logic [LZ_W-1:0] sub_shift,
  input  logic            ovf,
  input  logic            res_nan,
  input  logic            res_inf,
  input  logic            inf_sign,
  output logic [7:0]      y
);

  logic [W-1:0] shifted;
  logic [2:0]   mant;
  logic         sat;

  always_comb begin
    shifted = norm >> sub_shift;
    mant    = 3'(shifted[W-2:0] >> (W - 1 - fmt_mbits(mode)));
    sat     = ovf || (mode == MODE_E4M3 && exp_field == 5'd15 && mant == 3'b111);
    case (mode)
      MODE_E4M3: y = sat ? {neg, 7'h7E} : {neg, exp_field[3:0], mant[2:0]};
      MODE_E5M2: y = sat ? {neg, 7'h7B} : {neg, exp_field[4:0], mant[1:0]};
      MODE_E2M1: y = sat ? {4'h0, neg, 3'h7} : {4'h0, neg, exp_field[1:0], mant[0]};
      default:   y = sat ? {4'h0, neg, 3'h7} : {4'h0, neg, exp_field[0], mant[1:0]};
    endcase
    if (is_zero) y = 8'h00;
    if (res_inf) y = inf_sign ? E5M2_INF_NEG : E5M2_INF_POS;
    if (res_nan) y = NAN_CODE;
  end

endmodule
