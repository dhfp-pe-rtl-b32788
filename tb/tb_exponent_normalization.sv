// tb_exponent_normalization: random maximum exponents and leading-zero
// counts in every mode. The testbench finds the result exponent from the
// weight of the leading one (a real number, LSB weight 2^(max_exp-10)) and
// classifies it with its own table of each format's exponent range.
module tb_exponent_normalization;
  import dhfp_pkg::*;
  import dhfp_ref_pkg::*;

  mode_e mode;
  logic signed [EXP_W-1:0] max_exp;
  logic [3:0] lz, sub_shift;
  logic [4:0] exp_field;
  logic ovf;
  int checks = 0, failures = 0;

  exponent_normalization dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  //                   E4M3 E5M2 E2M1 E1M2
  int emin[4]     = '{ -6, -14,  0,  1};
  int emaxf[4]    = '{  8,  15,  2,  1};
  int biasv[4]    = '{  7,  15,  1,  0};

  initial begin
    for (int n = 0; n < 5000; n++) begin
      real w;
      int e, m;
      m = $urandom_range(0, 3);
      mode = mode_e'(m);
      max_exp = EXP_W'($urandom_range(0, 60) - 30);
      lz = 4'($urandom_range(0, 13));
      #1;
      w = pow2(13 - int'(lz)) * pow2(int'(max_exp) - 10);
      e = 0;
      while (w >= 2.0) begin w = w / 2.0; e++; end
      while (w < 1.0) begin w = w * 2.0; e--; end
      checks += 3;
      if (ovf != (e > emaxf[m])) failures++;
      if (e < emin[m]) begin
        if (exp_field != 0) failures++;
        if (sub_shift != 4'((emin[m] - e > 14) ? 14 : emin[m] - e)) failures++;
      end else begin
        if (!ovf && exp_field != 5'(e + biasv[m])) failures++;
        if (sub_shift != 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
