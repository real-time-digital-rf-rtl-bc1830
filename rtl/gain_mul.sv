// gain_mul: complex sample times a real 16-bit gain, one pipeline register.
//
// The node applies several real, angle- or range-dependent gains to complex
// samples: alpha(theta_in) on each input of a passive node, the lumped
// beta(theta_out) x rho(tau_i) on each of its outputs, G_T(theta_out) on the
// outputs of a transmit node and G_R(theta_in) in the receiver. Each is one
// multiplier on I and one on Q (paper: "Multipliers are used to apply RCS and
// path loss"; "only a single multiply unit is needed").
// Interface: x and g in, y = g*x out one clock later (GAIN_LAT = 1).
module gain_mul
  import rfe_pkg::*;
(
  input  logic  clk,
  input  cplx_t x,
  input  fp16_t g,
  output cplx_t y
);
  cplx_t p;
  fp16_mul u_re (.a(x.re), .b(g), .y(p.re));
  fp16_mul u_im (.a(x.im), .b(g), .y(p.im));
  always_ff @(posedge clk) y <= p;
endmodule
