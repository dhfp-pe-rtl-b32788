// alignment_shifter: alignment shifter of stage S3 of the PE.
//
// Shifts each signed window term right by its shift amount so that all three
// terms are expressed at the largest exponent. The shift is arithmetic
// (sign-filling) and the bits leaving the bottom of the window are dropped:
// this is where the PE's truncation happens, and for a negative term it
// rounds toward minus infinity. Written as a logarithmic barrel shifter, one
// mux level per shift-amount bit. Combinational.
module alignment_shifter #(
  parameter int unsigned ACC_W = 15,
  parameter int unsigned SH_W  = $clog2(ACC_W)
) (
  input  logic [ACC_W-1:0] t0,
  input  logic [ACC_W-1:0] t1,
  input  logic [ACC_W-1:0] tc,
  input  logic [SH_W-1:0]  sh0,
  input  logic [SH_W-1:0]  sh1,
  input  logic [SH_W-1:0]  shc,
  output logic [ACC_W-1:0] a0,
  output logic [ACC_W-1:0] a1,
  output logic [ACC_W-1:0] ac
);

  function automatic logic [ACC_W-1:0] barrel(input logic [ACC_W-1:0] x, input logic [SH_W-1:0] s);
    logic [ACC_W-1:0] v;
    v = x;
    for (int k = 0; k < SH_W; k++)
      if (s[k]) v = ACC_W'($signed(v) >>> (1 << k));
    return v;
  endfunction

  always_comb begin
    a0 = barrel(t0, sh0);
    a1 = barrel(t1, sh1);
    ac = barrel(tc, shc);
  end

endmodule
