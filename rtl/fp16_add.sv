// fp16_add: combinational 16-bit floating point adder.
//
// Used for the accumulation inside the MAC units, the adder trees and the
// complex multipliers. Format and conventions are those of fp16_mul
// (IEEE binary16, subnormals flushed to zero, truncation toward zero,
// saturation to infinity); these are this design's choices, the paper only
// states that the arithmetic is 16-bit floating point.
// The smaller operand is aligned into a 42-bit field wide enough to hold any
// exponent difference exactly, so the exact sum is formed and then truncated:
// the result equals the exact sum rounded toward zero.
module fp16_add
  import rfe_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  localparam int unsigned W = 42;   // 11 mantissa bits + 31 bits of alignment room

  logic        big_s, sml_s;
  logic [4:0]  big_e, sml_e;
  logic [10:0] big_m, sml_m;
  logic [4:0]  d;
  logic [W-1:0] xa, xb;
  logic [W:0]   sum;
  int           lead;
  logic signed [7:0] e;
  logic [W:0]   norm;

  always_comb begin
    // Order the operands by magnitude; a zero/subnormal operand becomes 0.
    if (a[14:0] >= b[14:0]) begin
      big_s = a[15]; big_e = a[14:10]; big_m = (a[14:10] == 0) ? 11'd0 : {1'b1, a[9:0]};
      sml_s = b[15]; sml_e = b[14:10]; sml_m = (b[14:10] == 0) ? 11'd0 : {1'b1, b[9:0]};
    end else begin
      big_s = b[15]; big_e = b[14:10]; big_m = (b[14:10] == 0) ? 11'd0 : {1'b1, b[9:0]};
      sml_s = a[15]; sml_e = a[14:10]; sml_m = (a[14:10] == 0) ? 11'd0 : {1'b1, a[9:0]};
    end
    d  = big_e - sml_e;
    xa = {big_m, 31'd0};
    xb = {sml_m, 31'd0} >> d;
    if (big_s == sml_s) sum = {1'b0, xa} + {1'b0, xb};
    else                sum = {1'b0, xa} - {1'b0, xb};

    lead = -1;
    for (int i = 0; i <= W; i++) if (sum[i]) lead = i;

    // The leading one of xa sits at bit W-1 with exponent big_e.
    e    = $signed({3'b0, big_e}) + 8'(lead - (W - 1));
    norm = (lead >= 0) ? (sum << (W - lead)) : '0;   // leading one moved to bit W

    if (big_e == 5'd31) begin
      y = {big_s, 5'd31, 10'd0};
    end else if (lead < 0 || big_e == 5'd0 || e <= 8'sd0) begin
      y = 16'h0000;
    end else if (e >= 8'sd31) begin
      y = {big_s, 5'd31, 10'd0};
    end else begin
      y = {big_s, e[4:0], norm[W-1 -: 10]};
    end
  end
endmodule
