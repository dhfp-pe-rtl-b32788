// tb_csla: carry-select adder against plain addition, with random operands
// and operand pairs that ripple a carry through every block.
module tb_csla;
  localparam int W = 15;
  logic [W-1:0] x, y, s;
  int checks = 0, failures = 0;

  csla #(.W(W), .BLK(4)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      x = W'($urandom); y = W'($urandom);
      if (n < 16) begin x = '1; y = W'(n); end
      #1;
      checks++;
      if (s != W'(x + y)) begin
        failures++;
        if (failures < 10) $display("x=%h y=%h s=%h", x, y, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
