// tb_relu: every code in every mode. Negative non-NaN codes must become 0,
// every other code must pass unchanged.
module tb_relu;
  import dhfp_pkg::*;
  import dhfp_ref_pkg::*;

  mode_e mode;
  logic [7:0] x, y;
  int checks = 0, failures = 0;

  relu dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 256; k++) begin
        real v; int e; bit z, nan, inf;
        logic [7:0] expv;
        mode = mode_e'(m); x = 8'(k);
        #1;
        in_val(2'(m), 8'(k), v, e, z, nan, inf);
        // sign of the code: a negative value, or negative zero / -Inf
        expv = ((m >= 2 ? x[3] : x[7]) && !nan) ? 8'h00 : x;
        checks++;
        if (y != expv) failures++;
        if (!nan && !z && v < 0) begin
          checks++;
          if (y != 8'h00) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
