// sem_extraction: stage S0 of the PE, "sign, exponent and mantissa extraction".
//
// Decodes the three 8-bit inputs A, B and C according to the 2-bit mode.
// FP8 modes (E4M3, E5M2) give one value per byte; the dual-FP4 modes (E2M1,
// E1M2) split A and B into two nibbles, lane 0 = [3:0], lane 1 = [7:4]. In
// FP4 modes C carries a single FP4 addend in C[3:0]; C[7:4] is ignored.
//
// For each value the decoder returns the sign, the unbiased exponent (1-bias
// for subnormals), the significand with its hidden bit restored and a zero
// flag; E4M3 NaN (S.1111.111) and E5M2 Inf/NaN (exponent 11111) are flagged.
// E5M2's 1.mm significand is zero-padded to 1.mm0 for the 4x4 multiplier. The
// E1M2 significand 1.mm is three bits wide while an FP4 lane of the unit
// multiplier is 2x2, so its last mantissa bit is truncated here (this design's
// choice, in line with the truncation-based arithmetic of the PE).
//
// Purely combinational; the S0 pipeline register is in dhfp_pe.
module sem_extraction
  import dhfp_pkg::*;
(
  input  mode_e    mode,
  input  logic [7:0] a,
  input  logic [7:0] b,
  input  logic [7:0] c,
  output operand_t dec_a,
  output operand_t dec_b,
  output operand_t dec_c
);

  // Decode one FP4 nibble into a 2-bit significand and unbiased exponent.
  function automatic void dec_fp4(input mode_e m, input logic [3:0] x,
                                  output logic s, output logic [EXP_W-1:0] e,
                                  output logic [1:0] sig, output logic z);
    s = x[3];
    if (m == MODE_E2M1) begin
      // S EE M, bias 1
      sig = {(x[2:1] != 2'b00), x[0]};
      e   = (x[2:1] == 2'b00) ? EXP_W'(0) : EXP_W'(int'(x[2:1]) - 1);
    end else begin
      // S E MM, bias 0: significand {E, M1} after truncating M0
      sig = {x[2], x[1]};
      e   = EXP_W'(1);
    end
    z = (sig == 2'b00);
    if (z) e = EXP_ZERO;
  endfunction

  function automatic operand_t decode(input mode_e m, input logic [7:0] x, input logic single);
    operand_t o;
    logic [EXP_W-1:0] e0, e1;
    logic [1:0] g0, g1;
    logic s0, s1, z0, z1;
    o = '0;
    case (m)
      MODE_E4M3: begin
        o.sign[0] = x[7];
        o.sig     = {(x[6:3] != 4'd0), x[2:0]};
        o.exp[0]  = (x[6:3] == 4'd0) ? EXP_W'(-6) : EXP_W'(int'(x[6:3]) - 7);
        o.nan     = (x[6:0] == 7'h7F);
        o.zero    = {1'b1, (x[6:0] == 7'd0)};
      end
      MODE_E5M2: begin
        o.sign[0] = x[7];
        o.sig     = {(x[6:2] != 5'd0), x[1:0], 1'b0};
        o.exp[0]  = (x[6:2] == 5'd0) ? EXP_W'(-14) : EXP_W'(int'(x[6:2]) - 15);
        o.nan     = (x[6:2] == 5'h1F) && (x[1:0] != 2'b00);
        o.inf     = (x[6:2] == 5'h1F) && (x[1:0] == 2'b00);
        o.zero    = {1'b1, (x[6:0] == 7'd0)};
      end
      default: begin
        dec_fp4(m, x[3:0], s0, e0, g0, z0);
        dec_fp4(m, x[7:4], s1, e1, g1, z1);
        if (single) begin
          s1 = 1'b0; e1 = EXP_ZERO; g1 = 2'b00; z1 = 1'b1;
        end
        o.sign = {s1, s0};
        o.exp  = {e1, e0};
        o.sig  = {g1, g0};
        o.zero = {z1, z0};
      end
    endcase
    if (!is_fp4(m) && o.zero[0]) o.exp[0] = EXP_ZERO;
    o.exp[1] = o.zero[1] ? EXP_ZERO : o.exp[1];
    return o;
  endfunction

  always_comb begin
    dec_a = decode(mode, a, 1'b0);
    dec_b = decode(mode, b, 1'b0);
    dec_c = decode(mode, c, 1'b1);
  end

endmodule
