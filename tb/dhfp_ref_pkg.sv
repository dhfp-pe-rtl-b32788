// dhfp_ref_pkg: behavioural reference model of the PE arithmetic, for the
// testbenches. It works on real numbers (every value here is a short dyadic
// fraction, so reals are exact) and restates the arithmetic contract rather
// than the datapath:
//   * operand values by the format definitions (E1M2 inputs lose their last
//     mantissa bit, as in the PE's decoder);
//   * the term exponent is Ea+Eb of the operands (Ec for the addend) and the
//     largest one, Emax, fixes a grid unit u = 2^(Emax-6-GUARD);
//   * every term is floored to a multiple of u, the floored terms are summed
//     exactly;
//   * the result is truncated toward zero to the mode's format (saturating at
//     the largest finite code) and passed through ReLU.
package dhfp_ref_pkg;

  // 2^e for any integer e
  function automatic real pow2(input int e);
    real r = 1.0;
    for (int k = 0; k < e; k++) r = r * 2.0;
    for (int k = 0; k > e; k--) r = r / 2.0;
    return r;
  endfunction

  // value of an input field, with the operand exponent used for alignment
  function automatic void in_val(input logic [1:0] mode, input logic [7:0] x,
                                 output real v, output int e, output bit z,
                                 output bit nan, output bit inf);
    int ef, m, s;
    nan = 0; inf = 0;
    case (mode)
      2'b00: begin
        s = x[7]; ef = x[6:3]; m = x[2:0];
        nan = (x[6:0] == 7'h7F);
        e = (ef == 0) ? -6 : ef - 7;
        v = ((ef == 0) ? m : 8 + m) / 8.0 * (2.0 ** e);
      end
      2'b01: begin
        s = x[7]; ef = x[6:2]; m = x[1:0];
        nan = (ef == 31) && (m != 0);
        inf = (ef == 31) && (m == 0);
        e = (ef == 0) ? -14 : ef - 15;
        v = ((ef == 0) ? m : 4 + m) / 4.0 * (2.0 ** e);
      end
      2'b10: begin
        s = x[3]; ef = x[2:1]; m = x[0];
        e = (ef == 0) ? 0 : ef - 1;
        v = ((ef == 0) ? m : 2 + m) / 2.0 * (2.0 ** e);
      end
      default: begin
        s = x[3]; ef = x[2]; m = x[1];   // last mantissa bit dropped
        e = 1;
        v = ((ef == 0) ? m : 2 + m) / 2.0 * (2.0 ** e);
      end
    endcase
    z = (v == 0.0);
    if (s) v = -v;
  endfunction

  // value of an output code in a format (full mantissa width)
  function automatic real out_val(input logic [1:0] mode, input int code);
    int ef, m;
    case (mode)
      2'b00: begin ef = code >> 3; m = code & 7;
        return ((ef == 0) ? m : 8 + m) / 8.0 * (2.0 ** ((ef == 0) ? -6 : ef - 7)); end
      2'b01: begin ef = code >> 2; m = code & 3;
        return ((ef == 0) ? m : 4 + m) / 4.0 * (2.0 ** ((ef == 0) ? -14 : ef - 15)); end
      2'b10: begin ef = code >> 1; m = code & 1;
        return ((ef == 0) ? m : 2 + m) / 2.0 * (2.0 ** ((ef == 0) ? 0 : ef - 1)); end
      default: begin ef = code >> 2; m = code & 3;
        return ((ef == 0) ? m : 4 + m) / 4.0 * 2.0; end
    endcase
  endfunction

  function automatic int max_code(input logic [1:0] mode);
    case (mode)
      2'b00: return 8'h7E;
      2'b01: return 8'h7B;
      default: return 7;
    endcase
  endfunction

  // largest non-negative code whose value does not exceed r (r >= 0)
  function automatic logic [7:0] encode_rtz(input logic [1:0] mode, input real r);
    int best = 0;
    for (int k = 0; k <= max_code(mode); k++)
      if (out_val(mode, k) <= r) best = k;
    return 8'(best);
  endfunction

  typedef struct {
    logic [7:0] y;
    real        exact;    // exact A*B+C (or dot product + C)
    real        result;   // truncated sum before format conversion
    bit         nan, inf, sat, sub, relu_clamp, trunc_loss, fp4;
  } ref_t;

  function automatic ref_t pe_ref(input logic [1:0] mode, input logic [7:0] a,
                                  input logic [7:0] b, input logic [7:0] c,
                                  input int guard);
    ref_t o;
    real va[2], vb[2], vt[3], u, acc, q;
    int  ea[2], eb[2], et[3], emax;
    bit  za[2], zb[2], zt[3], na[2], nb[2], ia[2], ib[2], nc, ic;
    bit  fp4 = mode[1];
    int  nl  = fp4 ? 2 : 1;
    o = '{default: 0};
    o.fp4 = fp4;
    for (int l = 0; l < 2; l++) begin
      va[l] = 0; vb[l] = 0; za[l] = 1; zb[l] = 1; na[l] = 0; nb[l] = 0; ia[l] = 0; ib[l] = 0;
      ea[l] = 0; eb[l] = 0;
    end
    for (int l = 0; l < nl; l++) begin
      in_val(mode, fp4 ? 8'(l ? a[7:4] : a[3:0]) : a, va[l], ea[l], za[l], na[l], ia[l]);
      in_val(mode, fp4 ? 8'(l ? b[7:4] : b[3:0]) : b, vb[l], eb[l], zb[l], nb[l], ib[l]);
    end
    in_val(mode, fp4 ? 8'(c[3:0]) : c, vt[2], et[2], zt[2], nc, ic);
    // specials (FP8 only)
    begin
      bit pn, pi;
      pn = na[0] || nb[0] || (ia[0] && zb[0]) || (za[0] && ib[0]);
      pi = (ia[0] || ib[0]) && !pn;
      o.nan = pn || nc || (pi && ic && ((va[0] < 0) != (vb[0] < 0)) != (vt[2] < 0));
      o.inf = !o.nan && (pi || ic);
      if (o.nan) begin o.y = 8'h7F; return o; end
      if (o.inf) begin
        bit neg = pi ? ((va[0] < 0) != (vb[0] < 0)) : (vt[2] < 0);
        o.y = neg ? 8'h00 : 8'h7C;
        o.relu_clamp = neg;
        return o;
      end
    end
    for (int l = 0; l < 2; l++) begin
      vt[l] = va[l] * vb[l];
      zt[l] = za[l] || zb[l];
      et[l] = ea[l] + eb[l];
    end
    emax = -1000;
    for (int t = 0; t < 3; t++) if (!zt[t] && et[t] > emax) emax = et[t];
    o.exact = vt[0] + vt[1] + vt[2];
    if (emax == -1000) begin o.y = 0; return o; end
    u = 2.0 ** (emax - 6 - guard);
    acc = 0;
    for (int t = 0; t < 3; t++) begin
      q = vt[t] / u;
      if (q != $floor(q)) o.trunc_loss = 1;
      acc += $floor(q);
    end
    o.result = acc * u;
    if (o.result < 0) begin o.relu_clamp = 1; o.y = 0; return o; end
    o.y = encode_rtz(mode, o.result);
    o.sat = o.result > out_val(mode, max_code(mode));
    o.sub = (o.result > 0) && (o.result < out_val(mode, (mode == 2'b00) ? 8 : (mode == 2'b01) ? 4 : (mode == 2'b10) ? 2 : 4));
    return o;
  endfunction

endpackage
