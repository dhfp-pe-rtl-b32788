// tb_csa_tree: random three-operand inputs; sum + carry must equal
// x + y + z modulo 2^W and the carry vector's LSB must be zero.
module tb_csa_tree;
  localparam int W = 15;
  logic [W-1:0] x, y, z, sum, carry;
  int checks = 0, failures = 0;

  csa_tree #(.W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      x = W'($urandom); y = W'($urandom); z = W'($urandom);
      if (n < 4) begin x = '1; y = '1; z = (n[0]) ? '1 : '0; end
      #1;
      checks += 2;
      if (W'(sum + carry) != W'(x + y + z)) failures++;
      if (carry[0] != 1'b0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
