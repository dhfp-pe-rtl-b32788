// tb_sign_processing: checks the product signs (XOR per lane) and the
// special-value outcome. The expected outcome is obtained by evaluating
// a*b + c in IEEE double arithmetic with stand-in values (+-1.5 for finite,
// +-0, +-Inf, NaN), so it does not restate the unit's rules.
module tb_sign_processing;
  import dhfp_pkg::*;

  operand_t dec_a, dec_b, dec_c;
  logic [1:0] sp;
  logic sc, res_nan, res_inf, inf_sign;
  int checks = 0, failures = 0;

  sign_processing dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // kind: 0 finite, 1 zero, 2 inf, 3 nan
  function automatic operand_t mk(input int kind, input bit s, input bit s1);
    operand_t o = '0;
    o.sign = {s1, s};
    o.zero = {1'b0, kind == 1};
    o.inf  = (kind == 2);
    o.nan  = (kind == 3);
    return o;
  endfunction

  function automatic real val(input int kind, input bit s);
    real v;
    case (kind)
      0: v = 1.5;
      1: v = 0.0;
      2: v = $bitstoreal(64'h7FF0000000000000);
      default: v = $bitstoreal(64'h7FF8000000000000);
    endcase
    return s ? -v : v;
  endfunction

  initial begin
    for (int n = 0; n < 4000; n++) begin
      automatic int ka = $urandom_range(0, 3), kb = $urandom_range(0, 3), kc = $urandom_range(0, 3);
      automatic bit sa = 1'($urandom), sb = 1'($urandom), scv = 1'($urandom);
      automatic bit sa1 = 1'($urandom), sb1 = 1'($urandom);
      real r;
      bit xnan, xinf;
      dec_a = mk(ka, sa, sa1); dec_b = mk(kb, sb, sb1); dec_c = mk(kc, scv, 1'b0);
      #1;
      r = val(ka, sa) * val(kb, sb) + val(kc, scv);
      xnan = ($realtobits(r) & 64'h7FFFFFFFFFFFFFFF) > 64'h7FF0000000000000;
      xinf = !xnan && (r == $bitstoreal(64'h7FF0000000000000) || r == $bitstoreal(64'hFFF0000000000000));
      checks += 4;
      if (sp != {sa1 ^ sb1, sa ^ sb}) failures++;
      if (sc != scv) failures++;
      if (res_nan != xnan) begin failures++; $display("nan: ka=%0d kb=%0d kc=%0d", ka, kb, kc); end
      if (res_inf != xinf) begin failures++; $display("inf: ka=%0d kb=%0d kc=%0d", ka, kb, kc); end
      if (xinf) begin
        checks++;
        if (inf_sign != (r < 0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
