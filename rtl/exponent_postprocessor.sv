// exponent_postprocessor: "exponent postprocessor" of stage S3 of the PE.
//
// Turns the three alignment offsets from the exponent comparator into shift
// amounts for the alignment shifter. An offset of ACC_W-1 or more already
// shifts every magnitude bit of a term out of the window, so larger offsets
// saturate to ACC_W-1 and the shifter needs only SH_W control bits. The unit
// is only named in the source; this saturating function is this design's
// reading of its place between the comparator and the shifter.
// Combinational.
module exponent_postprocessor
  import dhfp_pkg::*;
#(
  parameter int unsigned ACC_W = 15,
  parameter int unsigned SH_W  = $clog2(ACC_W)
) (
  input  logic [EXP_W-1:0] diff0,
  input  logic [EXP_W-1:0] diff1,
  input  logic [EXP_W-1:0] diffc,
  output logic [SH_W-1:0]  sh0,
  output logic [SH_W-1:0]  sh1,
  output logic [SH_W-1:0]  shc
);

  function automatic logic [SH_W-1:0] clamp(input logic [EXP_W-1:0] d);
    return (d >= EXP_W'(ACC_W - 1)) ? SH_W'(ACC_W - 1) : SH_W'(d);
  endfunction

  always_comb begin
    sh0 = clamp(diff0);
    sh1 = clamp(diff1);
    shc = clamp(diffc);
  end

endmodule
