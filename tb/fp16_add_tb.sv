// fp16_add_tb: checks the binary16 adder against a double-precision sum
// (exact for any two binary16 values) truncated to binary16: random
// operands of both signs and wide exponent spread, cancellation, and the
// overflow and zero corner cases.
module fp16_add_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  fp16_t a, b, y;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic check(fp16_t exp);
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL %h + %h = %h expected %h", a, b, y, exp);
    end
  endtask

  initial begin
    real r;
    for (int i = 0; i < 6000; i++) begin
      a = rnd_fp(2, 29);
      b = (i % 3 == 0) ? {~a[15], a[14:10], 10'($urandom)} : rnd_fp(2, 29);
      r = fp2r(a) + fp2r(b);
      // Skip sums that fall into the flushed subnormal range.
      if (r != 0.0 && (r < 0 ? -r : r) < 6.2e-5) continue;
      check(r2fp(r));
    end
    a = 16'h3C00; b = 16'hBC00; check(16'h0000);          // 1 - 1
    a = 16'h7BFF; b = 16'h7BFF; check(16'h7C00);          // overflow
    a = 16'h3C00; b = 16'h3C00; check(16'h4000);          // 1 + 1
    a = 16'h3C00; b = 16'h0000; check(16'h3C00);          // 1 + 0
    a = 16'h3C00; b = 16'h8001; check(16'h3C00);          // subnormal read as 0
    a = 16'h3C00; b = 16'h9000; check(16'h3BFF);          // 1 - 2^-11 truncates down
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
