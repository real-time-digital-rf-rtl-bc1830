// doppler_tb: programs three Doppler frequencies and runs the generator for
// several 256-cycle periods. Checks that new coefficients arrive exactly
// every 256 cycles, that each equals exp(-j 2 pi f n) for the sample index n
// of that update (computed here with $cos/$sin and truncated to binary16 at
// the 8K-entry phase resolution), and that each output is the complex
// product of its input and the applied coefficient two cycles later.
module doppler_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  localparam int unsigned N = 3;
  logic clk = 0, rst_n = 0, run = 0, upd;
  logic [31:0] fd [N];
  cplx_t x [N], y [N], coef [N];
  int checks = 0, failures = 0;
  int cyc = 0, last_upd = -1, n_upd = 0;
  longint n_samp;

  doppler #(.N_OUT(N)) dut (.clk, .rst_n, .run, .fdopp(fd), .x, .y, .coef, .upd);
  always #5 clk = ~clk;

  function automatic cplx_t expo(logic [31:0] f, longint n);
    logic [31:0] ph;
    real a;
    ph = 32'(longint'(f) * n);
    a  = 6.283185307179586 * real'(ph[31:19]) / 8192.0;
    return '{re: r2fp($cos(a)), im: r2fp(-$sin(a))};
  endfunction

  function automatic cplx_t cmul(cplx_t a, cplx_t b);
    real rr, ii, ri, ir;
    rr = fp2r(r2fp(fp2r(a.re) * fp2r(b.re)));
    ii = fp2r(r2fp(fp2r(a.im) * fp2r(b.im)));
    ri = fp2r(r2fp(fp2r(a.re) * fp2r(b.im)));
    ir = fp2r(r2fp(fp2r(a.im) * fp2r(b.re)));
    return '{re: r2fp(rr - ii), im: r2fp(ri + ir)};
  endfunction

  cplx_t xh [2][N];
  cplx_t ch [2][N];

  always @(posedge clk) if (run) cyc <= cyc + 1;

  initial begin
    fd[0] = 32'h0123_4567; fd[1] = 32'hF000_0000; fd[2] = 32'h0000_8000;
    for (int i = 0; i < N; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run = 1;
    for (int t = 0; t < 1400; t++) begin
      @(negedge clk);
      if (upd) begin
        n_upd++;
        n_samp = longint'(n_upd) * 256;
        checks++;
        if (last_upd >= 0 && cyc - last_upd != 256) begin
          failures++;
          $display("FAIL update interval %0d", cyc - last_upd);
        end
        last_upd = cyc;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (coef[i] !== expo(fd[i], n_samp)) begin
            failures++;
            $display("FAIL coef %0d n=%0d got %h exp %h", i, n_samp, coef[i], expo(fd[i], n_samp));
          end
        end
      end
      // Output check: y now = x two cycles ago times the coefficient then.
      if (t >= 2) for (int i = 0; i < N; i++) begin
        checks++;
        if (y[i] !== cmul(xh[1][i], ch[1][i])) begin
          failures++;
          if (failures < 10) $display("FAIL y%0d t=%0d got %h exp %h", i, t, y[i], cmul(xh[1][i], ch[1][i]));
        end
      end
      xh[1] = xh[0]; ch[1] = ch[0];
      for (int i = 0; i < N; i++) x[i] = '{re: rnd_fp(10, 18), im: rnd_fp(10, 18)};
      xh[0] = x; ch[0] = coef;
    end
    checks++;
    if (n_upd != 5) begin
      failures++;
      $display("FAIL %0d updates", n_upd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
