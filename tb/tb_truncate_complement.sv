// tb_truncate_complement: random products, addend significands, signs and
// modes. Each window term, read as a signed integer, must equal the term's
// value times 2^(6+GUARD): the FP8 product has 6 fraction bits, an FP4 lane
// product 2, the FP8 addend significand 3 and the FP4 one 1.
module tb_truncate_complement;
  import dhfp_pkg::*;
  localparam int GUARD = 4, ACC_W = 15;

  mode_e mode;
  logic [7:0] prod;
  logic [3:0] csig;
  logic [1:0] sp;
  logic sc;
  logic [ACC_W-1:0] t0, t1, tc;
  int checks = 0, failures = 0;

  truncate_complement #(.GUARD(GUARD)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [ACC_W-1:0] got, input real v, input string what);
    int expv = int'(v * (2.0 ** (6 + GUARD)));
    checks++;
    if ($signed(got) != expv) begin
      failures++;
      if (failures < 10) $display("%s mode=%0d prod=%02h csig=%0h: got %0d exp %0d", what, mode, prod, csig, $signed(got), expv);
    end
  endtask

  initial begin
    for (int n = 0; n < 5000; n++) begin
      real v0, v1, vc;
      mode = mode_e'($urandom_range(0, 3)); prod = 8'($urandom); csig = 4'($urandom);
      sp = 2'($urandom); sc = 1'($urandom);
      #1;
      if (mode[1]) begin
        v0 = prod[3:0] / 4.0; v1 = prod[7:4] / 4.0; vc = csig[1:0] / 2.0;
      end else begin
        v0 = prod / 64.0; v1 = 0.0; vc = csig / 8.0;
      end
      chk(t0, sp[0] ? -v0 : v0, "t0");
      chk(t1, sp[1] ? -v1 : v1, "t1");
      chk(tc, sc ? -vc : vc, "tc");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
