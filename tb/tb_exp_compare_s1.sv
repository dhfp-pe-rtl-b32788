// tb_exp_compare_s1: random decoded operands into the EC stage. Checks the
// term exponents (Ea+Eb per lane, Ec, the -64 marker for a zero term) and the
// three EC differences E1-Ec, E0-Ec, E1-E0.
module tb_exp_compare_s1;
  import dhfp_pkg::*;

  operand_t dec_a, dec_b, dec_c;
  logic signed [EXP_W-1:0] e0, e1, ec, d1c, d0c, d10;
  int checks = 0, failures = 0;

  exp_compare_s1 dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, expv);
    end
  endtask

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int ea[2], eb[2], ecv, x0, x1, xc;
      bit za[2], zb[2], zc;
      dec_a = '0; dec_b = '0; dec_c = '0;
      for (int l = 0; l < 2; l++) begin
        ea[l] = $urandom_range(0, 29) - 14; eb[l] = $urandom_range(0, 29) - 14;
        za[l] = ($urandom_range(0, 5) == 0); zb[l] = ($urandom_range(0, 5) == 0);
        dec_a.exp[l] = EXP_W'(ea[l]); dec_b.exp[l] = EXP_W'(eb[l]);
        dec_a.zero[l] = za[l]; dec_b.zero[l] = zb[l];
      end
      ecv = $urandom_range(0, 29) - 14; zc = ($urandom_range(0, 5) == 0);
      dec_c.exp[0] = EXP_W'(ecv); dec_c.zero[0] = zc;
      #1;
      x0 = (za[0] || zb[0]) ? -64 : ea[0] + eb[0];
      x1 = (za[1] || zb[1]) ? -64 : ea[1] + eb[1];
      xc = zc ? -64 : ecv;
      chk(e0, x0, "E0"); chk(e1, x1, "E1"); chk(ec, xc, "Ec");
      chk(d1c, x1 - xc, "E1-Ec"); chk(d0c, x0 - xc, "E0-Ec"); chk(d10, x1 - x0, "E1-E0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
