// tb_mantissa_normalization: random adder results. The testbench supplies the
// leading-zero count of |acc| itself and checks the sign, the magnitude and
// that the normalised word equals |acc| * 2^lz with its MSB set.
module tb_mantissa_normalization;
  localparam int ACC_W = 15;
  logic [ACC_W-1:0] acc;
  logic [3:0] lz;
  logic neg;
  logic [ACC_W-2:0] mag, norm;
  int checks = 0, failures = 0;

  mantissa_normalization #(.ACC_W(ACC_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      automatic int v = $urandom_range(0, 24576) - 12288;
      automatic int av = (v < 0) ? -v : v;
      if (n < 2) v = 0;
      av = (v < 0) ? -v : v;
      acc = ACC_W'(v);
      lz = 4'((ACC_W - 1) - $clog2(av + 1));
      #1;
      checks += 4;
      if (neg != (v < 0)) failures++;
      if (mag != (ACC_W-1)'(av)) failures++;
      if (norm != (ACC_W-1)'(av * (2 ** lz))) failures++;
      if (av != 0 && !norm[ACC_W-2]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
