// tb_fp32_mul: self-checking test of the combinational FP32 multiplier.
//
// Drives random operands over a wide exponent range (including products
// that overflow or fall below the normal range), plus fixed special cases,
// and compares every result bit-exactly with the double-precision reference
// rounded to FP32 (tb_fp_pkg).
module tb_fp32_mul;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] exp, input string what);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, y, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Fixed cases.
    a = 32'h3f80_0000; b = 32'h4000_0000; #1; check(32'h4000_0000, "1*2");
    a = 32'hbfc0_0000; b = 32'h3fc0_0000; #1; check(32'hc010_0000, "-1.5*1.5");
    a = 32'h0000_0000; b = 32'hc2f0_0000; #1; check(32'h8000_0000, "0*-120");
    a = 32'h7f7f_ffff; b = 32'h4000_0000; #1; check(32'h7f80_0000, "overflow");
    a = 32'h0080_0000; b = 32'h3f00_0000; #1; check(32'h0000_0000, "underflow");
    a = 32'h7f80_0000; b = 32'h0000_0000; #1; check(32'h7fc0_0000, "inf*0");
    a = 32'hff80_0000; b = 32'h3f80_0000; #1; check(32'hff80_0000, "-inf*1");
    a = 32'h0000_1234; b = 32'h3f80_0000; #1; check(32'h0000_0000, "subnormal in");
    // Random, mid range.
    for (int i = 0; i < 20000; i++) begin
      a = rand_f32(-20, 20);
      b = rand_f32(-20, 20);
      #1; check(fmul(a, b), "random");
    end
    // Random, near the ends of the exponent range.
    for (int i = 0; i < 5000; i++) begin
      a = rand_f32(-126, 127);
      b = rand_f32(-126, 127);
      #1;
      check(fmul(a, b), "wide");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
