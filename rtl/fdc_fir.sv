// fdc_fir: 4-tap FIR filter for fractional delay correction (FDC).
//
// Every input and every output path of a node has one of these filters. It
// interpolates the sample stream so that delays finer than one sample
// period can be emulated. As in the paper, the coefficients have the reduced
// 10-bit format (1 sign, 5 exponent, 4 mantissa bits) while the data are
// 16-bit floating point I/Q; each tap is therefore two real mixed-precision
// multipliers (8 per filter).
//   y(t) = sum_{k=0..3} c[k] * x(t - FDC_PIPE - k)
// The pipeline is multiply | add pairs | final add (FDC_PIPE = 3). Tap 1
// (FDC_ZERO_TAP) is taken as the zero time lag, so tap 0 is the +1 lag and
// taps 2 and 3 the -1 and -2 lags; with only c[1] non-zero the filter is a
// pure gain with latency FDC_LAT = 4. The choice of which tap is zero lag and
// the pipeline depth are this design's own; the paper gives neither.
module fdc_fir
  import rfe_pkg::*;
(
  input  logic    clk,
  input  cplx_t   x,
  input  coef10_t c [4],
  output cplx_t   y
);
  cplx_t xd [4];   // xd[k] = x delayed by k cycles
  cplx_t p  [4], pq [4];
  cplx_t s  [2], sq [2];
  cplx_t yc;

  assign xd[0] = x;
  always_ff @(posedge clk) begin
    xd[1] <= xd[0];
    xd[2] <= xd[1];
    xd[3] <= xd[2];
  end

  for (genvar k = 0; k < 4; k++) begin : g_tap
    fp16_mul u_re (.a(xd[k].re), .b(coef10_to_fp16(c[k])), .y(p[k].re));
    fp16_mul u_im (.a(xd[k].im), .b(coef10_to_fp16(c[k])), .y(p[k].im));
  end

  for (genvar k = 0; k < 2; k++) begin : g_add1
    fp16_add u_re (.a(pq[2*k].re), .b(pq[2*k+1].re), .y(s[k].re));
    fp16_add u_im (.a(pq[2*k].im), .b(pq[2*k+1].im), .y(s[k].im));
  end

  fp16_add u_fre (.a(sq[0].re), .b(sq[1].re), .y(yc.re));
  fp16_add u_fim (.a(sq[0].im), .b(sq[1].im), .y(yc.im));

  always_ff @(posedge clk) begin
    pq <= p;
    sq <= s;
    y  <= yc;
  end
endmodule
