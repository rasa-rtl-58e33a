// bf16_mul_tb: checks the BF16 x BF16 -> FP32 multiplier against the exact
// product computed in double precision, for random normal operands and for
// zeros, infinities, NaN, overflow and underflow.
module bf16_mul_tb;
  import tb_fp_pkg::*;
  logic [15:0] a, b;
  logic [31:0] p;
  int checks = 0, failures = 0;

  bf16_mul dut (.a(a), .b(b), .p(p));

  task automatic check(input logic [31:0] exp, input string what);
    #1;
    checks++;
    if (p !== exp) begin
      failures++;
      $display("FAIL %s: a=%h b=%h p=%h expected %h", what, a, b, p, exp);
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
    for (int i = 0; i < 2000; i++) begin
      a = {1'($urandom), 8'(64 + $urandom_range(0, 126)), 7'($urandom)};
      b = {1'($urandom), 8'(64 + $urandom_range(0, 126)), 7'($urandom)};
      check(to_fp32(bf16_to_real(a) * bf16_to_real(b)), "random");
    end
    a = 16'h3f80; b = 16'h4040; check(32'h4040_0000, "1*3");
    a = 16'h3fc0; b = 16'hbfc0; check(32'hc010_0000, "1.5*-1.5");
    a = 16'h0000; b = 16'h4040; check(32'h0000_0000, "0*3");
    a = 16'h8000; b = 16'h4040; check(32'h8000_0000, "-0*3");
    a = 16'h7f80; b = 16'h4040; check(32'h7f80_0000, "inf*3");
    a = 16'h7f80; b = 16'h0000; check(32'h7fc0_0000, "inf*0");
    a = 16'h7fc1; b = 16'h3f80; check(32'h7fc0_0000, "nan*1");
    a = 16'h7f00; b = 16'h7f00; check(32'h7f80_0000, "overflow");
    a = 16'h0100; b = 16'h0100; check(32'h0000_0000, "underflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
