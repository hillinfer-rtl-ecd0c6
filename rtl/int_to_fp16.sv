// int_to_fp16: converts a signed raw score to an FP16 score.
//
// The Score Block carries half-precision scores, so the 32-bit integer inner
// product is converted as value = a * 2^-sh, with the magnitude truncated
// (round toward zero), overflow saturated to the largest finite FP16 value
// (0x7BFF) and small values kept as subnormals. Truncation and saturation are
// monotone, so the conversion never reverses the order of two scores; this is
// what the host-side ranking relies on. The rounding and saturation rule is
// this implementation's choice. Purely combinational.
module int_to_fp16 (
  input  logic signed [31:0] a,
  input  logic [4:0]         sh,
  output logic [15:0]        h
);
  logic        sgn;
  logic [31:0] mag;
  logic [4:0]  p;        // index of the leading one
  logic signed [6:0] e;  // unbiased exponent
  logic [9:0]  frac;

  always_comb begin
    sgn  = a[31];
    mag  = sgn ? 32'(-a) : 32'(a);
    p    = '0;
    for (int i = 0; i < 32; i++)
      if (mag[i]) p = 5'(i);
    e    = $signed({2'b00, p}) - $signed({2'b00, sh});
    frac = '0;
    if (mag == '0) begin
      h = '0;
    end else if (e > 7'sd15) begin
      h = {sgn, 15'h7BFF};
    end else if (e >= -7'sd14) begin
      frac = 10'((p >= 5'd10) ? (mag >> (p - 5'd10)) : (mag << (5'd10 - p)));
      h    = {sgn, 5'(e + 7'sd15), frac};
    end else begin
      // subnormal: mantissa = a * 2^(24 - sh), always below 2^10 here
      frac = 10'((sh <= 5'd24) ? (mag << (5'd24 - sh)) : (mag >> (sh - 5'd24)));
      h    = {sgn, 5'd0, frac};
    end
  end
endmodule
