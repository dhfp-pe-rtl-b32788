// truncate_complement: "truncate/complement" unit of stage S3 of the PE.
//
// Places the three terms of the sum on one fixed-point window and gives them
// their signs. Each term's magnitude is put on the MAG_W-bit, FRAC-fraction-bit
// grid: the 4x4 product directly (FP8), each 2x2 lane product shifted up by 4
// (FP4), the addend significand shifted up by 3 (FP8, 1.xxx) or 5 (FP4, x.y).
// GUARD zero bits are appended below; anything the alignment shifter later
// pushes below these guard bits is truncated, which is the PE's
// truncation-based arithmetic. Negative terms are then two's-complemented
// into the ACC_W-bit signed window (ACC_W = MAG_W + GUARD + 3 holds the sum of
// three terms). The complement comes before alignment, the order in which the
// datapath diagram draws the two units. GUARD is this design's choice.
// Combinational.
module truncate_complement
  import dhfp_pkg::*;
#(
  parameter int unsigned GUARD = 4,
  parameter int unsigned ACC_W = MAG_W + GUARD + 3
) (
  input  mode_e            mode,
  input  logic [7:0]       prod,
  input  logic [3:0]       csig,
  input  logic [1:0]       sp,
  input  logic             sc,
  output logic [ACC_W-1:0] t0,
  output logic [ACC_W-1:0] t1,
  output logic [ACC_W-1:0] tc
);

  logic [MAG_W-1:0] m0, m1, mc;

  function automatic logic [ACC_W-1:0] window(input logic [MAG_W-1:0] m, input logic neg);
    logic [ACC_W-1:0] w;
    w = ACC_W'(m) << GUARD;
    return neg ? (~w + 1'b1) : w;
  endfunction

  always_comb begin
    if (is_fp4(mode)) begin
      m0 = MAG_W'(prod[3:0]) << 4;
      m1 = MAG_W'(prod[7:4]) << 4;
      mc = MAG_W'(csig[1:0]) << 5;
    end else begin
      m0 = prod;
      m1 = '0;
      mc = MAG_W'(csig) << 3;
    end
    t0 = window(m0, sp[0]);
    t1 = window(m1, sp[1]);
    tc = window(mc, sc);
  end

endmodule
