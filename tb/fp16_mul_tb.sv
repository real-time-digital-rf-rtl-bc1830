// fp16_mul_tb: checks the binary16 multiplier against a double-precision
// product truncated to binary16, for random normal operands and for the
// zero, overflow and infinity corner cases.
module fp16_mul_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  fp16_t a, b, y;
  int checks = 0, failures = 0;

  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(fp16_t exp);
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL %h * %h = %h expected %h", a, b, y, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 4000; i++) begin
      a = rnd_fp(5, 24);
      b = rnd_fp(5, 24);
      check(r2fp(fp2r(a) * fp2r(b)));
    end
    a = 16'h3C00; b = 16'h0000; check(16'h0000);          // 1 * 0
    a = 16'h7800; b = 16'h7800; check(16'h7C00);          // overflow
    a = 16'hF800; b = 16'h7800; check(16'hFC00);          // negative overflow
    a = 16'h0400; b = 16'h0400; check(16'h0000);          // underflow
    a = 16'h3C00; b = 16'hC000; check(16'hC000);          // 1 * -2
    a = 16'h3E00; b = 16'h3E00; check(16'h4080);          // 1.5 * 1.5 = 2.25
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
