// tb_sem_combination: random normalised magnitudes and exponents in every
// mode, with the classification inputs computed from the testbench's own
// format table. The packed code must be the sign plus the largest code whose
// value does not exceed the magnitude (truncation with saturation, via
// dhfp_ref_pkg::encode_rtz). Zero, NaN and infinity overrides are checked too.
module tb_sem_combination;
  import dhfp_pkg::*;
  import dhfp_ref_pkg::*;

  mode_e mode;
  logic neg, is_zero, ovf, res_nan, res_inf, inf_sign;
  logic [13:0] norm;
  logic [4:0] exp_field;
  logic [3:0] sub_shift;
  logic [7:0] y;
  int checks = 0, failures = 0;

  sem_combination dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int emin[4]  = '{ -6, -14,  0,  1};
  int emaxf[4] = '{  8,  15,  2,  1};
  int biasv[4] = '{  7,  15,  1,  0};

  initial begin
    for (int n = 0; n < 6000; n++) begin
      automatic int m = $urandom_range(0, 3), e;
      real v;
      logic [7:0] expv;
      mode = mode_e'(m);
      norm = 14'($urandom) | 14'h2000;
      e = $urandom_range(emin[m] - 16, emaxf[m] + 2);
      if (n < 200) begin
        // the top binade of each format, where saturation meets the largest codes
        e = emaxf[m]; norm = 14'h3800 | 14'($urandom);
      end
      neg = 1'($urandom);
      is_zero = (n >= 200) && ($urandom_range(0, 31) == 0);
      res_nan = (n >= 200) && ($urandom_range(0, 31) == 0);
      res_inf = !res_nan && ($urandom_range(0, 31) == 0);
      inf_sign = 1'($urandom);
      ovf = e > emaxf[m];
      exp_field = (e < emin[m]) ? 5'd0 : ovf ? 5'((m == 0) ? 15 : (m == 1) ? 30 : (m == 2) ? 3 : 1) : 5'(e + biasv[m]);
      sub_shift = (e < emin[m]) ? 4'((emin[m] - e > 14) ? 14 : emin[m] - e) : 4'd0;
      #1;
      v = norm / 8192.0 * (2.0 ** e);
      expv = encode_rtz(2'(m), v);
      if (neg) expv = expv | ((m >= 2) ? 8'h08 : 8'h80);
      if (is_zero) expv = 8'h00;
      if (res_inf) expv = inf_sign ? 8'hFC : 8'h7C;
      if (res_nan) expv = 8'h7F;
      checks++;
      if (y != expv) begin
        failures++;
        if (failures < 10) $display("mode=%0d norm=%h e=%0d v=%g y=%02h exp=%02h", m, norm, e, v, y, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
