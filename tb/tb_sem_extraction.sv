// tb_sem_extraction: checks the S0 decoder against the format definitions in
// dhfp_ref_pkg. For every byte in every mode the decoded sign, significand
// and exponent must reproduce the value of the operand (FP4: each nibble of
// A and B, and C[3:0] with C's lane 1 empty), and the zero, NaN and Inf flags
// must match.
module tb_sem_extraction;
  import dhfp_pkg::*;
  import dhfp_ref_pkg::*;

  mode_e mode;
  logic [7:0] a, b, c;
  operand_t dec_a, dec_b, dec_c;
  int checks = 0, failures = 0;

  sem_extraction dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("mode=%0d x=%02h: %s sig=%h exp=%0d %0d", mode, a, what, dec_a.sig, dec_a.exp[0], dec_a.exp[1]);
    end
  endtask

  function automatic real lane_val(input operand_t o, input int l, input bit fp4);
    real s;
    logic signed [EXP_W-1:0] e;
    int sig;
    e = (l == 1) ? o.exp[1] : o.exp[0];
    if (!fp4)      sig = int'(o.sig);
    else if (l == 1) sig = int'(o.sig[3:2]);
    else           sig = int'(o.sig[1:0]);
    s = (fp4 ? sig / 2.0 : sig / 8.0) * pow2(int'(e));
    return o.sign[l] ? -s : s;
  endfunction

  initial begin
    for (int m = 0; m < 4; m++)
      for (int x = 0; x < 256; x++) begin
        real v; int e; bit z, nan, inf;
        automatic bit fp4 = (m >= 2);
        mode = mode_e'(m); a = 8'(x); b = 8'(x); c = 8'(x);
        #1;
        for (int l = 0; l < (fp4 ? 2 : 1); l++) begin
          in_val(2'(m), fp4 ? 8'(l ? x >> 4 : x & 15) : 8'(x), v, e, z, nan, inf);
          chk(dec_a.zero[l] == z, "zero flag");
          if (!nan && !inf && !z) begin
            chk(lane_val(dec_a, l, fp4) == v, "value");
            if (failures < 3 && lane_val(dec_a, l, fp4) != v) $display("l=%0d lv=%g v=%g", l, lane_val(dec_a, l, fp4), v);
            chk(dec_a.sign[l] == (v < 0), "sign");
          end
          if (z) chk(dec_a.exp[l] == 8'hC0, "zero exponent marker");
          if (!fp4) begin
            chk(dec_a.nan == nan, "nan flag");
            chk(dec_a.inf == inf, "inf flag");
          end
          chk(dec_b == dec_a, "A and B decode alike");
        end
        if (!fp4) chk(dec_a.zero[1] == 1'b1, "lane 1 empty in FP8");
        chk(dec_c.zero[1] == 1'b1, "C lane 1 empty");
        in_val(2'(m), fp4 ? 8'(x & 15) : 8'(x), v, e, z, nan, inf);
        if (!nan && !inf && !z) chk(lane_val(dec_c, 0, fp4) == v, "C value");
        chk(dec_c.zero[0] == z, "C zero");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
