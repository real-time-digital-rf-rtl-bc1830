// adder_tree_tb: sums N = 3 random complex streams (the receiver's size) and
// checks every output against the pairwise-rounded double-precision sum of
// the inputs tree_lat(3) = 2 cycles earlier.
module adder_tree_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  localparam int unsigned N = 3;
  localparam int unsigned LAT = tree_lat(N);
  logic clk = 0;
  cplx_t x [N];
  cplx_t y;
  cplx_t exp_q [$];
  int checks = 0, failures = 0;

  adder_tree #(.N(N)) dut (.clk, .x, .y);
  always #5 clk = ~clk;

  function automatic fp16_t sum3(fp16_t a, fp16_t b, fp16_t c);
    return r2fp(fp2r(r2fp(fp2r(a) + fp2r(b))) + fp2r(c));
  endfunction

  initial begin
    for (int n = 0; n < N; n++) x[n] = '0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if (exp_q.size() >= LAT) begin
        cplx_t e;
        e = exp_q.pop_front();
        checks++;
        if (y !== e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d y=%h exp=%h", i, y, e);
        end
      end
      for (int n = 0; n < N; n++) x[n] = '{re: rnd_fp(10, 20), im: rnd_fp(10, 20)};
      exp_q.push_back('{re: sum3(x[0].re, x[1].re, x[2].re), im: sum3(x[0].im, x[1].im, x[2].im)});
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
