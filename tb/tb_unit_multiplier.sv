// tb_unit_multiplier: exhaustive check of the bit-partitioned unit
// multiplier. For every 4-bit a and b: split=0 must give the 8-bit product
// a*b, split=1 the two independent 2-bit products packed as
// {a[3:2]*b[3:2], a[1:0]*b[1:0]}.
module tb_unit_multiplier;
  logic split;
  logic [3:0] a, b;
  logic [7:0] p;
  int checks = 0, failures = 0;

  unit_multiplier dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          int expv;
          split = 1'(s); a = 4'(i); b = 4'(j);
          #1;
          expv = s ? (((i >> 2) * (j >> 2)) << 4) + ((i & 3) * (j & 3)) : i * j;
          checks++;
          if (p != 8'(expv)) begin
            failures++;
            if (failures < 10) $display("split=%0d a=%0d b=%0d p=%0d exp=%0d", s, i, j, p, expv);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
