// tb_alignment_shifter: random signed terms and shift amounts; every output
// must be floor(term / 2^shift), the arithmetic-shift truncation.
module tb_alignment_shifter;
  localparam int W = 15;
  logic [W-1:0] t0, t1, tc, a0, a1, ac;
  logic [3:0] sh0, sh1, shc;
  int checks = 0, failures = 0;

  alignment_shifter #(.ACC_W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fl(input logic [W-1:0] x, input int s);
    return int'($floor(real'($signed(x)) / (2.0 ** s)));
  endfunction

  initial begin
    for (int n = 0; n < 5000; n++) begin
      t0 = W'($urandom); t1 = W'($urandom); tc = W'($urandom);
      sh0 = 4'($urandom_range(0, 14)); sh1 = 4'($urandom_range(0, 14)); shc = 4'($urandom_range(0, 14));
      #1;
      checks += 3;
      if ($signed(a0) != fl(t0, sh0)) failures++;
      if ($signed(a1) != fl(t1, sh1)) failures++;
      if ($signed(ac) != fl(tc, shc)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
