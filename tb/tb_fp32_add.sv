// tb_fp32_add -- self-checking test of the FP32 adder.
//
// Random operands with close, medium (3..26 apart) and distant exponents and both signs (so that
// alignment, carry-out, cancellation and renormalisation are all exercised)
// are added by the unit and by the simulator: a sum of two floats computed
// in double precision and then rounded to single precision (tb_fp_pkg) is the correctly
// rounded single-precision sum, which is the reference. Results that would
// be subnormal are flushed to zero by both the unit and the reference.
module tb_fp32_add;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    logic [31:0] r;
    for (int i = 0; i < 40000; i++) begin
      automatic int unsigned ea = 40 + ($urandom % 170);
      automatic int unsigned eb = (i % 4 == 0) ? 40 + ($urandom % 170) :
                        (i % 4 == 1) ? ea - 3 - ($urandom % 24) :   // bits lost to sticky
                                       ea - 2 + ($urandom % 5);
      a = {1'($urandom), 8'(ea), 23'($urandom)};
      b = {1'($urandom), 8'(eb), 23'($urandom)};
      if (i % 7 == 0) b = {~a[31], a[30:4], 4'($urandom)};   // near cancellation
      r  = fadd(a, b);
      check(r, "random");
    end
    a = 32'h3F80_0000; b = 32'h3F80_0000; check(32'h4000_0000, "1+1");
    a = 32'h3F80_0000; b = 32'hBF80_0000; check(32'h0000_0000, "1-1");
    a = 32'h0000_0000; b = 32'hC040_0000; check(32'hC040_0000, "0+-3");
    a = 32'h8000_0000; b = 32'h8000_0000; check(32'h8000_0000, "-0+-0");
    a = 32'h7F80_0000; b = 32'hFF80_0000; check(32'h7FC0_0000, "inf-inf");
    a = 32'h7F80_0000; b = 32'h3F80_0000; check(32'h7F80_0000, "inf+1");
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; check(32'h7F80_0000, "overflow");
    a = 32'h4B80_0000; b = 32'h3F80_0000; check(32'h4B80_0000, "2^24+1 tie to even");
    a = 32'h4B80_0000; b = 32'h4000_0000; check(32'h4B80_0001, "2^24+2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
