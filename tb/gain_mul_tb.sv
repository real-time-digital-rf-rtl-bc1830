// gain_mul_tb: streams a new random sample and gain through gain_mul on
// every cycle and checks each output exactly one cycle later (latency 1)
// against the truncated double-precision products of I and Q with the gain.
module gain_mul_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  logic clk = 0;
  cplx_t x, y, ex;
  fp16_t g;
  int checks = 0, failures = 0;

  gain_mul dut (.clk, .x, .g, .y);
  always #5 clk = ~clk;

  initial begin
    x = '0; g = '0;
    repeat (2) @(posedge clk);
    for (int i = 0; i <= 500; i++) begin
      @(negedge clk);
      // the output now belongs to the inputs applied one cycle ago
      if (i > 0) begin
        checks++;
        if (y !== ex) begin
          failures++;
          $display("FAIL x=%h g=%h y=%h exp=%h", x, g, y, ex);
        end
      end
      x = '{re: rnd_fp(8, 22), im: rnd_fp(8, 22)};
      g = rnd_fp(8, 22);
      // the output is registered: new inputs must not show before the edge
      #1;
      if (i > 0) begin
        checks++;
        if (y !== ex) begin
          failures++;
          $display("FAIL output changed before the clock edge: y=%h exp=%h", y, ex);
        end
      end
      ex = '{re: r2fp(fp2r(x.re) * fp2r(g)), im: r2fp(fp2r(x.im) * fp2r(g))};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
