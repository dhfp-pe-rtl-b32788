// tb_dhfp_pe: end-to-end self-checking testbench of the PE at its default
// parameters. Streams directed and random operations in all four modes
// through the pipeline, mostly back to back with occasional idle cycles, and
// checks every result against the reference model in dhfp_ref_pkg, the
// latency (result exactly six cycles after its inputs) and the rate (one
// result per cycle while inputs are valid every cycle). It also counts how
// often each mechanism of the PE was exercised (mode switch, dual-FP4 dot
// product, NaN, infinity, saturation, subnormal result, ReLU clamp,
// alignment truncation) and fails if any never happened.
module tb_dhfp_pe;
  import dhfp_pkg::*;
  import dhfp_ref_pkg::*;

  localparam int GUARD   = 4;   // default of dhfp_pe
  localparam int LATENCY = 6;
  localparam int NRAND   = 20000;

  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  mode_e mode = MODE_E4M3;
  logic [7:0] a = 0, b = 0, c = 0, y;

  dhfp_pe dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int n_switch = 0, n_fp4 = 0, n_fp8 = 0, n_nan = 0, n_inf = 0, n_sat = 0,
      n_sub = 0, n_relu = 0, n_trunc = 0, n_b2b = 0, n_out = 0, n_inexact = 0, n_pos = 0;

  typedef struct { ref_t r; int t; logic [1:0] m; logic [7:0] a, b, c; } exp_t;
  exp_t q[$];

  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (NRAND + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  logic prev_out = 0;
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      exp_t e;
      n_out++;
      if (prev_out) n_b2b++;
      if (q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        e = q.pop_front();
        checks++;
        if (y !== e.r.y) begin
          failures++;
          if (failures < 20)
            $display("MISMATCH mode=%0d a=%02h b=%02h c=%02h y=%02h exp=%02h (exact %g trunc %g)",
                     e.m, e.a, e.b, e.c, y, e.r.y, e.r.exact, e.r.result);
        end
        checks++;
        if (cycle - e.t != LATENCY) begin
          failures++; $display("latency %0d, expected %0d", cycle - e.t, LATENCY);
        end
      end
    end
    prev_out <= out_valid;
  end

  task automatic issue(input logic [1:0] m, input logic [7:0] xa, xb, xc);
    ref_t r;
    static logic [1:0] last_m = 2'b00;
    static bit first = 1;
    r = pe_ref(m, xa, xb, xc, GUARD);
    mode = mode_e'(m); a = xa; b = xb; c = xc; in_valid = 1;
    if (!first && m != last_m) n_switch++;
    first = 0; last_m = m;
    if (m[1]) n_fp4++; else n_fp8++;
    n_nan += r.nan; n_inf += r.inf; n_sat += r.sat; n_sub += r.sub;
    n_relu += r.relu_clamp; n_trunc += r.trunc_loss;
    // how often the truncated window sum encodes differently from the exact value
    if (!r.nan && !r.inf && r.exact > 0 && encode_rtz(m, r.exact) != r.y) n_inexact++;
    if (!r.nan && !r.inf && r.exact > 0) n_pos++;
    // inputs are driven after a falling edge and sampled at the next rising
    // edge, which reads the current value of cycle
    q.push_back('{r: r, t: cycle, m: m, a: xa, b: xb, c: xc});
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic logic [7:0] rnd8();
    return 8'($urandom);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    // directed: FP8 E4M3 1.0*1.0+1.0 = 2.0 (0x40)
    issue(2'b00, 8'h38, 8'h38, 8'h38);
    // E4M3 saturation 448*448
    issue(2'b00, 8'h7E, 8'h7E, 8'h00);
    // E4M3 NaN input
    issue(2'b00, 8'h7F, 8'h38, 8'h38);
    // E5M2 +inf, -inf, inf-inf, inf*0
    issue(2'b01, 8'h7C, 8'h3C, 8'h00);
    issue(2'b01, 8'hFC, 8'h3C, 8'h00);
    issue(2'b01, 8'h7C, 8'h3C, 8'hFC);
    issue(2'b01, 8'h7C, 8'h00, 8'h3C);
    // E5M2 subnormal result
    issue(2'b01, 8'h04, 8'h3C, 8'h00);
    // dual FP4 E2M1: 1*1 + 1.5*2 + 1 = 5 -> 4 (0x6)
    issue(2'b10, 8'h34, 8'h22, 8'h02);
    // ReLU: E4M3 -1*1 + 0
    issue(2'b00, 8'hB8, 8'h38, 8'h00);
    // E1M2
    issue(2'b11, 8'h57, 8'h45, 8'h06);
    // random, back to back, occasional bubbles and mode switches
    for (int i = 0; i < NRAND; i++) begin
      logic [1:0] m;
      logic [7:0] xa, xb, xc;
      m = 2'($urandom); xa = rnd8(); xb = rnd8(); xc = rnd8();
      if ($urandom_range(0, 3) == 0) begin
        // addend close to the product so that terms interact
        if (!m[1]) xc = {xc[7], xa[6:3] + xb[6:3] - ((m == 2'b00) ? 4'd7 : 4'd15) + 4'(xc[1:0]), xc[2:0]};
      end
      issue(m, xa, xb, xc);
      if ($urandom_range(0, 15) == 0) @(negedge clk);
    end
    repeat (LATENCY + 3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("mechanisms: mode_switch=%0d fp8=%0d fp4_dual=%0d nan=%0d inf=%0d saturate=%0d subnormal=%0d relu_clamp=%0d align_truncation=%0d back_to_back=%0d",
             n_switch, n_fp8, n_fp4, n_nan, n_inf, n_sat, n_sub, n_relu, n_trunc, n_b2b);
    checks += 10;
    if (n_switch == 0) failures++;
    if (n_fp8 == 0) failures++;
    if (n_fp4 == 0) failures++;
    if (n_nan == 0) failures++;
    if (n_inf == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_sub == 0) failures++;
    if (n_relu == 0) failures++;
    if (n_trunc == 0) failures++;
    if (n_b2b == 0) failures++;
    $display("positive finite results: %0d, differing from truncation of the exact value: %0d", n_pos, n_inexact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
