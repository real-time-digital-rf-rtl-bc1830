// fp16_mul: combinational 16-bit floating point multiplier.
//
// The datapath of every node is built from multiply-accumulate units working
// on 16-bit floating point numbers (paper: "16-bit floating point
// multipliers (both data and coefficients are 16-bits)"). The paper does not
// give the number format or the rounding; this design uses IEEE binary16
// (1 sign, 5 exponent with bias 15, 10 mantissa bits) and makes these own
// choices, which keep the unit small:
//   * subnormal inputs are read as zero and results below the normal range
//     flush to +0;
//   * the product is truncated (rounded toward zero);
//   * an exponent field of 31 is read as infinity and overflow saturates to
//     infinity of the right sign; NaN is not produced.
// The 11x11-bit mantissa product is exact, so truncation of it is exact.
module fp16_mul
  import rfe_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        s;
  logic [4:0]  ea, eb;
  logic [10:0] ma, mb;
  logic [21:0] p;
  logic signed [7:0] e;
  logic [9:0]  m;

  always_comb begin
    s  = a[15] ^ b[15];
    ea = a[14:10];
    eb = b[14:10];
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    p  = ma * mb;
    e  = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 8'sd15;
    if (p[21]) begin
      m = p[20:11];
      e = e + 8'sd1;
    end else begin
      m = p[19:10];
    end
    if (ea == 5'd31 || eb == 5'd31) begin
      y = (ea == 5'd0 || eb == 5'd0) ? 16'h0000 : {s, 5'd31, 10'd0};
    end else if (ea == 5'd0 || eb == 5'd0 || e <= 8'sd0) begin
      y = 16'h0000;
    end else if (e >= 8'sd31) begin
      y = {s, 5'd31, 10'd0};
    end else begin
      y = {s, e[4:0], m};
    end
  end
endmodule
