// dhfp_pkg: types, constants and format functions shared by the stages of the
// dual-precision FP8/FP4 processing element.
//
// The mode encoding is the one printed on the datapath diagram of the PE:
// 00 FP8 E4M3, 01 FP8 E5M2, 10 dual FP4 E2M1, 11 dual FP4 E1M2.
// Exponent biases are this design's choice (2^(E-1)-1, the IEEE rule): the
// source architecture only writes "bias". Internally every exponent is kept
// unbiased in a signed EXP_W-bit field; a zero term carries EXP_ZERO so that it
// can never be the maximum exponent.
//
// Every non-zero term of the sum is represented on one fixed-point grid: an
// MAG_W-bit magnitude with FRAC fraction bits, i.e. value = mag * 2^(exp-FRAC).
// A 4x4 product of two 1.xxx significands fills that grid exactly; FP4 lane
// products and the addend significand are shifted up onto it.
package dhfp_pkg;

  typedef enum logic [1:0] {
    MODE_E4M3 = 2'b00,
    MODE_E5M2 = 2'b01,
    MODE_E2M1 = 2'b10,
    MODE_E1M2 = 2'b11
  } mode_e;

  localparam int unsigned EXP_W = 8;
  localparam logic signed [EXP_W-1:0] EXP_ZERO = -8'sd64;
  localparam int unsigned MAG_W = 8;
  localparam int unsigned FRAC  = 6;

  // One decoded 8-bit operand. In FP8 modes only lane 0 is used and sig holds
  // the 4-bit significand 1.xxx (hidden bit at [3]). In FP4 modes sig holds two
  // 2-bit significands {lane1, lane0}, each x.y with the hidden bit on the left.
  typedef struct packed {
    logic [1:0]            sign;
    logic [1:0][EXP_W-1:0] exp;   // unbiased, two's complement
    logic [3:0]            sig;
    logic [1:0]            zero;
    logic                  nan;
    logic                  inf;
  } operand_t;

  function automatic logic is_fp4(input mode_e m);
    return m[1];
  endfunction

  // Number of stored mantissa bits of the output format.
  function automatic int unsigned fmt_mbits(input mode_e m);
    case (m)
      MODE_E4M3: return 3;
      MODE_E5M2: return 2;
      MODE_E2M1: return 1;
      default:   return 2;
    endcase
  endfunction

  function automatic int fmt_bias(input mode_e m);
    case (m)
      MODE_E4M3: return 7;
      MODE_E5M2: return 15;
      MODE_E2M1: return 1;
      default:   return 0;
    endcase
  endfunction

  // Number of exponent field bits of the format.
  function automatic int unsigned fmt_ebits(input mode_e m);
    case (m)
      MODE_E4M3: return 4;
      MODE_E5M2: return 5;
      MODE_E2M1: return 2;
      default:   return 1;
    endcase
  endfunction

  // Largest finite exponent field (E5M2 reserves all-ones for Inf/NaN).
  function automatic int fmt_max_field(input mode_e m);
    case (m)
      MODE_E4M3: return 15;
      MODE_E5M2: return 30;
      MODE_E2M1: return 3;
      default:   return 1;
    endcase
  endfunction

  localparam logic [7:0] NAN_CODE     = 8'h7F;
  localparam logic [7:0] E5M2_INF_POS = 8'h7C;
  localparam logic [7:0] E5M2_INF_NEG = 8'hFC;

endpackage
