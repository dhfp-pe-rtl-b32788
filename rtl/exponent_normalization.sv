// exponent_normalization: exponent normaliser of stage S5 of the PE.
//
// The magnitude's LSB weighs 2^(max_exp - FRAC - GUARD), so a leading one at
// position ACC_W-2-lz gives the unbiased result exponent
//   e_r = max_exp + (ACC_W-2) - FRAC - GUARD - lz.
// Against the output format of the current mode (FP8 modes give their own
// format, FP4 modes one FP4 value) the unit reports the biased exponent field,
// overflow (e_r above the largest finite exponent), and for a result below the
// smallest normal exponent 1-bias a subnormal right shift of (1-bias) - e_r
// with a zero exponent field. Combinational.
module exponent_normalization
  import dhfp_pkg::*;
#(
  parameter int unsigned GUARD = 4,
  parameter int unsigned ACC_W = MAG_W + GUARD + 3,
  parameter int unsigned LZ_W  = $clog2(ACC_W)
) (
  input  mode_e                   mode,
  input  logic signed [EXP_W-1:0] max_exp,
  input  logic [LZ_W-1:0]         lz,
  output logic [4:0]              exp_field,
  output logic [LZ_W-1:0]         sub_shift,
  output logic                    ovf
);

  int e_r, e_min, biased;

  always_comb begin
    e_r    = int'(max_exp) + int'(ACC_W) - 2 - int'(FRAC) - int'(GUARD) - int'(lz);
    e_min  = 1 - fmt_bias(mode);
    biased = e_r + fmt_bias(mode);
    ovf    = biased > fmt_max_field(mode);
    if (e_r < e_min) begin
      exp_field = '0;
      sub_shift = (e_min - e_r >= ACC_W - 1) ? LZ_W'(ACC_W - 1) : LZ_W'(e_min - e_r);
    end else begin
      exp_field = ovf ? 5'(fmt_max_field(mode)) : 5'(biased);
      sub_shift = '0;
    end
  end

endmodule
