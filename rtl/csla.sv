// csla: carry-select adder of stage S4 of the PE.
//
// Adds the sum and carry vectors of the CSA tree. The word is cut into blocks
// of BLK bits; every block above the lowest computes its sum twice, for a
// carry-in of 0 and of 1, and the carry out of the block below selects one
// of the two, so the carry chain runs through one mux per block rather than
// through every bit. The result is modulo 2^W (the carry out is dropped).
// The block size is this design's choice. Combinational.
module csla #(
  parameter int unsigned W   = 15,
  parameter int unsigned BLK = 4
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  output logic [W-1:0] s
);

  localparam int unsigned NB = (W + BLK - 1) / BLK;

  always_comb begin
    logic [BLK:0] r0, r1;
    logic [BLK-1:0] xb, yb;
    logic cin;
    s = '0;
    cin = 1'b0;
    for (int blk = 0; blk < NB; blk++) begin
      xb = '0;
      yb = '0;
      for (int k = 0; k < BLK; k++) begin
        if (blk*BLK + k < W) begin
          xb[k] = x[blk*BLK + k];
          yb[k] = y[blk*BLK + k];
        end
      end
      r0 = {1'b0, xb} + {1'b0, yb};
      r1 = {1'b0, xb} + {1'b0, yb} + 1'b1;
      for (int k = 0; k < BLK; k++)
        if (blk*BLK + k < W)
          s[blk*BLK + k] = cin ? r1[k] : r0[k];
      cin = cin ? r1[BLK] : r0[BLK];
    end
  end

endmodule
