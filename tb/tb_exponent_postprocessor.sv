// tb_exponent_postprocessor: every offset 0..255 on all three inputs; the
// shift amount must be the offset, saturated at ACC_W-1 = 14.
module tb_exponent_postprocessor;
  logic [7:0] diff0, diff1, diffc;
  logic [3:0] sh0, sh1, shc;
  int checks = 0, failures = 0;

  exponent_postprocessor #(.ACC_W(15)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 256; d++) begin
      automatic int expv = (d > 14) ? 14 : d;
      diff0 = 8'(d); diff1 = 8'(255 - d); diffc = 8'((d * 7) & 255);
      #1;
      checks += 3;
      if (sh0 != 4'(expv)) begin failures++; if (failures < 5) $display("d=%0d sh0=%0d sh1=%0d shc=%0d", d, sh0, sh1, shc); end
      if (sh1 != 4'(((255 - d) > 14) ? 14 : 255 - d)) begin failures++; if (failures < 5) $display("d=%0d sh1=%0d", d, sh1); end
      if (shc != 4'((((d * 7) & 255) > 14) ? 14 : ((d * 7) & 255))) begin failures++; if (failures < 5) $display("d=%0d diffc=%0d shc=%0d", d, diffc, shc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
