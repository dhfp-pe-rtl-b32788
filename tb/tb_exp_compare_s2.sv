// tb_exp_compare_s2: random exponents (including the -64 zero marker and
// ties) with their EC differences into the LUT stage; Max1 must be the
// largest exponent and each Diff the distance of its term to it.
module tb_exp_compare_s2;
  import dhfp_pkg::*;

  logic signed [EXP_W-1:0] e0, e1, ec, d1c, d0c, d10, max_exp;
  logic [EXP_W-1:0] diff0, diff1, diffc;
  int checks = 0, failures = 0;

  exp_compare_s2 dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pick();
    if ($urandom_range(0, 7) == 0) return -64;
    return $urandom_range(0, 8) - 4 + ($urandom_range(0, 1) ? $urandom_range(0, 50) - 25 : 0);
  endfunction

  initial begin
    for (int n = 0; n < 10000; n++) begin
      automatic int x0 = pick(), x1 = pick(), xc = pick(), mx;
      e0 = EXP_W'(x0); e1 = EXP_W'(x1); ec = EXP_W'(xc);
      d1c = EXP_W'(x1 - xc); d0c = EXP_W'(x0 - xc); d10 = EXP_W'(x1 - x0);
      #1;
      mx = (x0 > x1) ? x0 : x1;
      if (xc > mx) mx = xc;
      checks += 4;
      if (max_exp != mx) failures++;
      if (diff0 != EXP_W'(mx - x0)) failures++;
      if (diff1 != EXP_W'(mx - x1)) failures++;
      if (diffc != EXP_W'(mx - xc)) failures++;
      if (failures == 1 && n < 10000) begin
        $display("e0=%0d e1=%0d ec=%0d max=%0d d=%0d %0d %0d", x0, x1, xc, max_exp, diff0, diff1, diffc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
