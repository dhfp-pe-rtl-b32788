// tb_lza: every 14-bit input; the count must be 14 minus the number of bits
// needed to write the value ($clog2(x+1)).
module tb_lza;
  localparam int W = 14;
  logic [W-1:0] x;
  logic [3:0] lz;
  int checks = 0, failures = 0;

  lza #(.W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << W); v++) begin
      x = W'(v);
      #1;
      checks++;
      if (lz != 4'(W - $clog2(v + 1))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
