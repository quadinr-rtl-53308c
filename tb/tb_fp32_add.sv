// tb_fp32_add: self-checking test of the combinational FP32 adder.
//
// Drives random operand pairs with controlled exponent differences (0 to 40)
// and both sign combinations, near-cancellation pairs, and fixed special
// cases, and compares every result bit-exactly with the reference.
module tb_fp32_add;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] exp, input string what);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp);
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
    a = 32'h3f80_0000; b = 32'h3f80_0000; #1; check(32'h4000_0000, "1+1");
    a = 32'h3f80_0000; b = 32'hbf80_0000; #1; check(32'h0000_0000, "1-1");
    a = 32'h8000_0000; b = 32'h8000_0000; #1; check(32'h8000_0000, "-0+-0");
    a = 32'h4040_0000; b = 32'hbf80_0000; #1; check(32'h4000_0000, "3-1");
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; #1; check(32'h7f80_0000, "overflow");
    a = 32'h7f80_0000; b = 32'hff80_0000; #1; check(32'h7fc0_0000, "inf-inf");
    a = 32'h7f80_0000; b = 32'h3f80_0000; #1; check(32'h7f80_0000, "inf+1");
    a = 32'h0081_0000; b = 32'h8080_0000; #1; check(32'h0000_0000, "flush");
    a = 32'h4b80_0000; b = 32'h3f80_0000; #1; check(32'h4b80_0000, "tie to even");
    a = 32'h4b80_0001; b = 32'h3f80_0000; #1; check(32'h4b80_0002, "tie to even up");
    for (int d = 0; d <= 40; d++) begin
      for (int i = 0; i < 600; i++) begin
        int e;
        e = int'($urandom % 60) - 30;
        a = rand_f32(e, e);
        b = rand_f32(e - d, e - d);
        if (i % 2 == 1) begin
          logic [31:0] t;
          t = a; a = b; b = t;
        end
        #1; check(fadd(a, b), "random");
      end
    end
    // Near cancellation: b = -a with the low mantissa bits changed.
    for (int i = 0; i < 5000; i++) begin
      a = rand_f32(-10, 10);
      b = {~a[31], a[30:8], 8'($urandom)};
      #1; check(fadd(a, b), "cancel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
