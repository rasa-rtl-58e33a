// fp32_add_tb: checks the FP32 adder against a double-precision sum rounded
// to FP32 (nearest even). Operand exponents differ by at most 24 in the
// random part, so the double sum is exact and the single rounding is the
// reference. Directed cases cover cancellation, ties, zeros, Inf, NaN,
// overflow and far-apart operands.
module fp32_add_tb;
  import tb_fp_pkg::*;
  logic [31:0] a, b, s;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .s(s));

  task automatic check(input logic [31:0] exp, input string what);
    #1;
    checks++;
    if (s !== exp) begin
      failures++;
      $display("FAIL %s: a=%h b=%h s=%h expected %h", what, a, b, s, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea;
    for (int i = 0; i < 5000; i++) begin
      ea = $urandom_range(60, 190);
      a = {1'($urandom), 8'(ea), 23'($urandom)};
      b = {1'($urandom), 8'(ea + $urandom_range(0, 48) - 24), 23'($urandom)};
      if (i % 4 == 0) b[30:23] = a[30:23];          // more cancellation
      check(to_fp32(fp32_to_real(a) + fp32_to_real(b)), "random");
    end
    a = 32'h3f80_0000; b = 32'hbf80_0000; check(32'h0000_0000, "x-x");
    a = 32'h8000_0000; b = 32'h8000_0000; check(32'h8000_0000, "-0+-0");
    a = 32'h0000_0000; b = 32'h4049_0fdb; check(32'h4049_0fdb, "0+y");
    a = 32'h4b00_0000; b = 32'h3f00_0000; check(32'h4b00_0000, "tie to even down");
    a = 32'h4b00_0001; b = 32'h3f00_0000; check(32'h4b00_0002, "tie to even up");
    a = 32'h4f80_0000; b = 32'h3f80_0000; check(32'h4f80_0000, "far apart");
    a = 32'h4f80_0000; b = 32'hbf80_0000; check(32'h4f80_0000, "far apart sub");
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; check(32'h7f80_0000, "overflow");
    a = 32'h7f80_0000; b = 32'h3f80_0000; check(32'h7f80_0000, "inf+1");
    a = 32'h7f80_0000; b = 32'hff80_0000; check(32'h7fc0_0000, "inf-inf");
    a = 32'h7fc0_0001; b = 32'h3f80_0000; check(32'h7fc0_0000, "nan");
    a = 32'h0080_0001; b = 32'h8080_0000; check(32'h0000_0000, "underflow flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
