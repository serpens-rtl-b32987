// tb_fp32_mul -- self-checking test of the FP32 multiplier.
//
// Random normal operands whose product stays in the normal range are
// multiplied by the unit and by the simulator's own arithmetic: the double
// product of two floats is exact, so rounding it to single precision (bit-level,
// in tb_fp_pkg) gives the correctly rounded reference. Special cases (zero, infinity, NaN,
// overflow) are checked against hand-worked values.
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));


  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a = rnd_f32(64, 190);
      b = rnd_f32(64, 190);
      check(fmul(a, b), "random");
    end
    a = 32'h3F80_0000; b = 32'h4000_0000; check(32'h4000_0000, "1*2");
    a = 32'h0000_0000; b = 32'h4000_0000; check(32'h0000_0000, "0*2");
    a = 32'h8000_0000; b = 32'h4000_0000; check(32'h8000_0000, "-0*2");
    a = 32'h7F80_0000; b = 32'hC000_0000; check(32'hFF80_0000, "inf*-2");
    a = 32'h7F80_0000; b = 32'h0000_0000; check(32'h7FC0_0000, "inf*0");
    a = 32'h7FC0_0001; b = 32'h3F80_0000; check(32'h7FC0_0000, "nan");
    a = 32'h7F00_0000; b = 32'h7F00_0000; check(32'h7F80_0000, "overflow");
    a = 32'h0080_0000; b = 32'h0080_0000; check(32'h0000_0000, "underflow");
    a = 32'h3FC0_0000; b = 32'h3FC0_0000; check(32'h4010_0000, "1.5*1.5");
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
