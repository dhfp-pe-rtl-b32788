// relu: ReLU activation at the end of stage S5 of the PE.
//
// A negative result (sign bit set: y[7] for FP8, y[3] for an FP4 code) is
// replaced by +0; everything else, including NaN, passes unchanged. Negative
// zero therefore also becomes +0. The activation is always applied, as in the
// PE it is taken from; passing NaN through is this design's choice.
// Combinational.
module relu
  import dhfp_pkg::*;
(
  input  mode_e      mode,
  input  logic [7:0] x,
  output logic [7:0] y
);

  logic sign, nan;

  always_comb begin
    sign = is_fp4(mode) ? x[3] : x[7];
    case (mode)
      MODE_E4M3: nan = (x[6:0] == 7'h7F);
      MODE_E5M2: nan = (x[6:2] == 5'h1F) && (x[1:0] != 2'b00);
      default:   nan = 1'b0;
    endcase
    y = (sign && !nan) ? 8'h00 : x;
  end

endmodule
