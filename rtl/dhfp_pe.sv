// dhfp_pe: dual-precision FP8/FP4 multiply-accumulate processing element.
//
// Every clock cycle the PE accepts three 8-bit inputs and a 2-bit mode and,
// six cycles later, delivers one 8-bit result:
//   FP8 modes (E4M3, E5M2):      y = ReLU(A*B + C)
//   dual-FP4 modes (E2M1, E1M2): y = ReLU(A[7:4]*B[7:4] + A[3:0]*B[3:0] + C[3:0])
// so it performs 2 floating-point operations per cycle in FP8 and 4 in FP4.
// Both products come from one bit-partitioned 4-bit unit multiplier. The
// three terms are aligned to the largest exponent found by a three-input
// EC+LUT comparator, summed through a 3:2 carry-save stage and a carry-select
// adder, normalised with a leading-zero count and truncated to the format of
// the mode (FP4 results in y[3:0]).
//
// Pipeline (one register bank after each stage, mode and valid travel along):
//   S0 sem_extraction                      decode A, B, C
//   S1 unit_multiplier, exp_compare_s1,    significand products, exponent
//      sign_processing                     differences, signs and specials
//   S2 exp_compare_s2                      max exponent and offsets (LUT)
//   S3 truncate_complement,                signed window terms, clamped shifts,
//      exponent_postprocessor,             alignment
//      alignment_shifter
//   S4 csa_tree, csla                      three-term sum
//   S5 mantissa_normalization, lza,        normalise, pack, activate
//      exponent_normalization,
//      sem_combination, relu
// Inputs sampled at clock edge k appear on y/out_valid after edge k+5, i.e.
// a latency of six cycles, with a new operation accepted every cycle.
// The stage contents follow the datapath diagram of the source; the valid
// bits, the asynchronous active-high reset (which clears only the valid bits)
// and the GUARD width are this design's choices.
module dhfp_pe
  import dhfp_pkg::*;
#(
  parameter int unsigned GUARD = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  input  mode_e      mode,
  input  logic [7:0] a,
  input  logic [7:0] b,
  input  logic [7:0] c,
  output logic       out_valid,
  output logic [7:0] y
);

  localparam int unsigned ACC_W = MAG_W + GUARD + 3;
  localparam int unsigned SH_W  = $clog2(ACC_W);
  localparam int unsigned LZ_W  = $clog2(ACC_W);

  // ---------------------------------------------------------------- S0
  typedef struct packed {
    mode_e    mode;
    operand_t a, b, c;
  } s0_t;

  operand_t dec_a, dec_b, dec_c;
  s0_t      r0;
  logic [5:0] vld;

  sem_extraction u_sem (
    .mode(mode), .a(a), .b(b), .c(c),
    .dec_a(dec_a), .dec_b(dec_b), .dec_c(dec_c)
  );

  always_ff @(posedge clk or posedge rst) begin
    if (rst) vld <= '0;
    else     vld <= {vld[4:0], in_valid};
  end

  always_ff @(posedge clk) r0 <= '{mode: mode, a: dec_a, b: dec_b, c: dec_c};

  // ---------------------------------------------------------------- S1
  typedef struct packed {
    mode_e                   mode;
    logic [7:0]              prod;
    logic [3:0]              csig;
    logic signed [EXP_W-1:0] e0, e1, ec, d1c, d0c, d10;
    logic [1:0]              sp;
    logic                    sc, res_nan, res_inf, inf_sign;
  } s1_t;

  s1_t s1_d, r1;

  unit_multiplier #(.N(4)) u_mul (
    .split(is_fp4(r0.mode)), .a(r0.a.sig), .b(r0.b.sig), .p(s1_d.prod)
  );

  exp_compare_s1 u_ec1 (
    .dec_a(r0.a), .dec_b(r0.b), .dec_c(r0.c),
    .e0(s1_d.e0), .e1(s1_d.e1), .ec(s1_d.ec),
    .d1c(s1_d.d1c), .d0c(s1_d.d0c), .d10(s1_d.d10)
  );

  sign_processing u_sign (
    .dec_a(r0.a), .dec_b(r0.b), .dec_c(r0.c),
    .sp(s1_d.sp), .sc(s1_d.sc),
    .res_nan(s1_d.res_nan), .res_inf(s1_d.res_inf), .inf_sign(s1_d.inf_sign)
  );

  assign s1_d.mode = r0.mode;
  assign s1_d.csig = r0.c.sig;

  always_ff @(posedge clk) r1 <= s1_d;

  // ---------------------------------------------------------------- S2
  typedef struct packed {
    mode_e                   mode;
    logic [7:0]              prod;
    logic [3:0]              csig;
    logic signed [EXP_W-1:0] max_exp;
    logic [EXP_W-1:0]        diff0, diff1, diffc;
    logic [1:0]              sp;
    logic                    sc, res_nan, res_inf, inf_sign;
  } s2_t;

  s2_t s2_d, r2;

  exp_compare_s2 u_ec2 (
    .e0(r1.e0), .e1(r1.e1), .ec(r1.ec),
    .d1c(r1.d1c), .d0c(r1.d0c), .d10(r1.d10),
    .max_exp(s2_d.max_exp), .diff0(s2_d.diff0), .diff1(s2_d.diff1), .diffc(s2_d.diffc)
  );

  assign s2_d.mode     = r1.mode;
  assign s2_d.prod     = r1.prod;
  assign s2_d.csig     = r1.csig;
  assign s2_d.sp       = r1.sp;
  assign s2_d.sc       = r1.sc;
  assign s2_d.res_nan  = r1.res_nan;
  assign s2_d.res_inf  = r1.res_inf;
  assign s2_d.inf_sign = r1.inf_sign;

  always_ff @(posedge clk) r2 <= s2_d;

  // ---------------------------------------------------------------- S3
  typedef struct packed {
    mode_e                   mode;
    logic [ACC_W-1:0]        a0, a1, ac;
    logic signed [EXP_W-1:0] max_exp;
    logic                    res_nan, res_inf, inf_sign;
  } s3_t;

  s3_t s3_d, r3;
  logic [ACC_W-1:0] t0, t1, tc;
  logic [SH_W-1:0]  sh0, sh1, shc;

  truncate_complement #(.GUARD(GUARD), .ACC_W(ACC_W)) u_tc (
    .mode(r2.mode), .prod(r2.prod), .csig(r2.csig), .sp(r2.sp), .sc(r2.sc),
    .t0(t0), .t1(t1), .tc(tc)
  );

  exponent_postprocessor #(.ACC_W(ACC_W), .SH_W(SH_W)) u_epp (
    .diff0(r2.diff0), .diff1(r2.diff1), .diffc(r2.diffc),
    .sh0(sh0), .sh1(sh1), .shc(shc)
  );

  alignment_shifter #(.ACC_W(ACC_W), .SH_W(SH_W)) u_align (
    .t0(t0), .t1(t1), .tc(tc), .sh0(sh0), .sh1(sh1), .shc(shc),
    .a0(s3_d.a0), .a1(s3_d.a1), .ac(s3_d.ac)
  );

  assign s3_d.mode     = r2.mode;
  assign s3_d.max_exp  = r2.max_exp;
  assign s3_d.res_nan  = r2.res_nan;
  assign s3_d.res_inf  = r2.res_inf;
  assign s3_d.inf_sign = r2.inf_sign;

  always_ff @(posedge clk) r3 <= s3_d;

  // ---------------------------------------------------------------- S4
  typedef struct packed {
    mode_e                   mode;
    logic [ACC_W-1:0]        acc;
    logic signed [EXP_W-1:0] max_exp;
    logic                    res_nan, res_inf, inf_sign;
  } s4_t;

  s4_t s4_d, r4;
  logic [ACC_W-1:0] csa_sum, csa_carry;

  csa_tree #(.W(ACC_W)) u_csa (
    .x(r3.a0), .y(r3.a1), .z(r3.ac), .sum(csa_sum), .carry(csa_carry)
  );

  csla #(.W(ACC_W), .BLK(4)) u_csla (
    .x(csa_sum), .y(csa_carry), .s(s4_d.acc)
  );

  assign s4_d.mode     = r3.mode;
  assign s4_d.max_exp  = r3.max_exp;
  assign s4_d.res_nan  = r3.res_nan;
  assign s4_d.res_inf  = r3.res_inf;
  assign s4_d.inf_sign = r3.inf_sign;

  always_ff @(posedge clk) r4 <= s4_d;

  // ---------------------------------------------------------------- S5
  logic             neg, ovf;
  logic [ACC_W-2:0] mag, norm;
  logic [LZ_W-1:0]  lz, sub_shift;
  logic [4:0]       exp_field;
  logic [7:0]       packed_y, act_y;

  mantissa_normalization #(.ACC_W(ACC_W), .LZ_W(LZ_W)) u_mnorm (
    .acc(r4.acc), .lz(lz), .neg(neg), .mag(mag), .norm(norm)
  );

  lza #(.W(ACC_W-1), .LZ_W(LZ_W)) u_lza (.x(mag), .lz(lz));

  exponent_normalization #(.GUARD(GUARD), .ACC_W(ACC_W), .LZ_W(LZ_W)) u_enorm (
    .mode(r4.mode), .max_exp(r4.max_exp), .lz(lz),
    .exp_field(exp_field), .sub_shift(sub_shift), .ovf(ovf)
  );

  sem_combination #(.W(ACC_W-1), .LZ_W(LZ_W)) u_comb (
    .mode(r4.mode), .neg(neg), .norm(norm), .is_zero(lz == LZ_W'(ACC_W-1)),
    .exp_field(exp_field), .sub_shift(sub_shift), .ovf(ovf),
    .res_nan(r4.res_nan), .res_inf(r4.res_inf), .inf_sign(r4.inf_sign),
    .y(packed_y)
  );

  relu u_relu (.mode(r4.mode), .x(packed_y), .y(act_y));

  always_ff @(posedge clk) y <= act_y;

  assign out_valid = vld[5];

  // Every accepted operation leaves the pipeline exactly six cycles later,
  // and nothing leaves that was not accepted.
  a_latency : assert property (@(posedge clk) disable iff (rst) in_valid |-> ##6 out_valid);
  a_no_spurious : assert property (@(posedge clk) disable iff (rst) out_valid |-> $past(in_valid, 6));

endmodule
