// adder_tree: pipelined sum of N complex 16-bit floating point samples.
//
// Forms the intermediate signal v(t) = sum alpha(theta_m) s_m(t) in a
// passive node and the receiver output sum G_R(theta_m) s_m(t). Inputs are
// padded with zeros to the next power of two and added pairwise, with one
// register per level: latency tree_lat(N) = ceil(log2 N) cycles (1 for N=1).
// The paper draws the tree but not its pipelining; one register per level
// is this design's choice.
module adder_tree
  import rfe_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic  clk,
  input  cplx_t x [N],
  output cplx_t y
);
  localparam int unsigned L  = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned N2 = 1 << L;

  // Level l holds N2 >> l values; level 0 is the padded input.
  cplx_t lv [L+1][N2];

  for (genvar i = 0; i < N2; i++) begin : g_in
    if (i < N) begin : g_x
      assign lv[0][i] = x[i];
    end else begin : g_zero
      assign lv[0][i] = '0;
    end
  end

  for (genvar l = 0; l < L; l++) begin : g_lvl
    for (genvar i = 0; i < (N2 >> (l + 1)); i++) begin : g_add
      cplx_t s;
      fp16_add u_re (.a(lv[l][2*i].re), .b(lv[l][2*i+1].re), .y(s.re));
      fp16_add u_im (.a(lv[l][2*i].im), .b(lv[l][2*i+1].im), .y(s.im));
      always_ff @(posedge clk) lv[l+1][i] <= s;
    end
    for (genvar i = (N2 >> (l + 1)); i < N2; i++) begin : g_unused
      assign lv[l+1][i] = '0;
    end
  end

  assign y = lv[L][0];
endmodule
