// csa_tree: 3:2 carry-save adder tree of stage S4 of the PE.
//
// Reduces the three aligned terms (lane-0 product, lane-1 product, addend)
// to a sum vector and a carry vector with one row of full adders and no carry
// propagation: sum = x^y^z, carry = majority(x,y,z) shifted left by one. With
// three inputs the tree is a single 3:2 level. All vectors are W-bit two's
// complement; sum + carry equals x + y + z modulo 2^W. Combinational.
module csa_tree #(
  parameter int unsigned W = 15
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);

  logic [W-1:0] maj;

  always_comb begin
    sum   = x ^ y ^ z;
    maj   = (x & y) | (x & z) | (y & z);
    carry = {maj[W-2:0], 1'b0};
  end

endmodule
