// tb_dhfp_pe_throughput: the sustained-rate workload of the PE. For each of
// the four modes it streams 2000 operations back to back (a new operation on
// every clock), checks every result against dhfp_ref_pkg, and measures the
// floating-point operations completed per clock between the first and the
// last result: 2 per cycle in the FP8 modes (one multiply, one add) and 4 in
// the dual-FP4 modes (two multiplies, two adds). At a 1.938 GHz clock these
// rates are 3.88 and 7.75 GFLOPS.
module tb_dhfp_pe_throughput;
  import dhfp_pkg::*;
  import dhfp_ref_pkg::*;

  localparam int N = 2000;

  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  mode_e mode = MODE_E4M3;
  logic [7:0] a = 0, b = 0, c = 0, y;
  int checks = 0, failures = 0, cycle = 0;
  int first_out = -1, last_out = 0, n_out = 0;
  logic [7:0] expq[$];

  dhfp_pe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (4 * N + 500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      n_out++;
      checks++;
      if (expq.size() == 0 || y !== expq.pop_front()) failures++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    for (int m = 0; m < 4; m++) begin
      int flop_per_op;
      real rate;
      first_out = -1; n_out = 0;
      for (int i = 0; i < N; i++) begin
        mode = mode_e'(m); a = 8'($urandom); b = 8'($urandom); c = 8'($urandom);
        in_valid = 1;
        expq.push_back(pe_ref(2'(m), a, b, c, 4).y);
        @(negedge clk);
      end
      in_valid = 0;
      repeat (8) @(negedge clk);
      flop_per_op = (m >= 2) ? 4 : 2;
      rate = real'(n_out * flop_per_op) / real'(last_out - first_out + 1);
      $display("mode %0d: %0d results in %0d cycles, %0.2f FLOP/cycle, %0.2f GFLOPS at 1.938 GHz",
               m, n_out, last_out - first_out + 1, rate, rate * 1.938);
      checks += 2;
      if (n_out != N) failures++;
      if (rate != real'(flop_per_op)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
