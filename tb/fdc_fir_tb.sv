// fdc_fir_tb: drives a random I/Q stream and random 10-bit coefficients
// through the 4-tap FDC filter. The expected output is computed in double
// precision from the input history, rounding each product and partial sum
// the way the filter's pairwise adder order does. Also checks that with
// only the zero-lag tap set to 1.0 the filter is a pure delay of FDC_LAT.
module fdc_fir_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  logic clk = 0;
  cplx_t x, y;
  coef10_t c [4];
  cplx_t hist [1024];
  int    hn = 0;
  int checks = 0, failures = 0;

  fdc_fir dut (.clk, .x, .c, .y);
  always #5 clk = ~clk;

  function automatic fp16_t ref_fir(int part);   // part 0: re, 1: im
    fp16_t v [4];
    real   p [4];
    int    n;
    cplx_t h;
    n = hn;
    for (int k = 0; k < 4; k++) begin
      h = hist[n - int'(FDC_PIPE) - k];
      v[k] = part ? h.im : h.re;
      p[k] = fp2r(r2fp(fp2r(v[k]) * c10r(c[k])));
    end
    return r2fp(fp2r(r2fp(p[0] + p[1])) + fp2r(r2fp(p[2] + p[3])));
  endfunction

  initial begin
    cplx_t ex;
    for (int k = 0; k < 4; k++) c[k] = {1'($urandom), 5'(12 + $urandom_range(4)), 4'($urandom)};
    x = '0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      // Check the output produced by the inputs seen so far.
      if (hn >= 8) begin
        ex = '{re: ref_fir(0), im: ref_fir(1)};
        checks++;
        if (y !== ex) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d y=%h exp=%h", i, y, ex);
        end
      end
      x = '{re: rnd_fp(10, 20), im: rnd_fp(10, 20)};
      hist[hn] = x;
      hn++;
    end
    // Pure delay: only the zero-lag tap is 1.0.
    c = '{10'h000, 10'h0F0, 10'h000, 10'h000};
    hn = 0;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      if (hn > FDC_LAT) begin
        checks++;
        if (y !== hist[hn - int'(FDC_LAT)]) begin
          failures++;
          $display("FAIL delay t=%0d y=%h exp=%h", i, y, hist[hn - int'(FDC_LAT)]);
        end
      end
      x = '{re: rnd_fp(10, 20), im: rnd_fp(10, 20)};
      hist[hn] = x;
      hn++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
