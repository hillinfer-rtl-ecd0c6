// tb_ref_pkg: reference arithmetic for the evaluation-kernel testbenches.
//
// Everything here is computed with real numbers, independently of the RTL's
// bit-level shifting: FP16 decoding, the scaled, rounded and saturated cast to
// INT8/INT4, and the truncating, saturating integer-to-FP16 conversion of a
// score. It also holds the hash used to generate key and query data, so that
// no test data has to be stored.
package tb_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    int  e = int'(h[14:10]);
    real m = real'(h[9:0]);
    real v;
    if (e == 0) v = m * (2.0 ** -24);
    else        v = (1.0 + m / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  // q = saturate(round_half_away(x * 2^shift)); INT8 +-127, INT4 +-7
  function automatic int ref_quant(logic [15:0] h, int shift, bit int4);
    int  maxm = int4 ? 7 : 127;
    real v, m;
    int  r;
    if (h[14:10] == 5'h1F) begin
      if (h[9:0] != 0) return 0;
      return h[15] ? -maxm : maxm;
    end
    v = fp16_to_real(h) * (2.0 ** shift);
    m = (v < 0.0) ? -v : v;
    if (m >= 200.0) r = maxm;
    else begin
      r = int'($floor(m + 0.5));
      if (r > maxm) r = maxm;
    end
    return (v < 0.0) ? -r : r;
  endfunction

  // FP16 of a * 2^-sh, magnitude truncated, saturated to 0x7BFF
  function automatic logic [15:0] ref_i2h(longint a, int sh);
    real m = ((a < 0) ? -real'(a) : real'(a)) * (2.0 ** -sh);
    logic s = (a < 0);
    int  e;
    if (a == 0) return 16'h0000;
    if (m >= 65536.0) return {s, 15'h7BFF};
    e = 15;
    while (e > -14 && m < (2.0 ** e)) e--;
    if (m >= (2.0 ** -14))
      return {s, 5'(e + 15), 10'($rtoi($floor((m / (2.0 ** e) - 1.0) * 1024.0)))};
    return {s, 5'd0, 10'($rtoi($floor(m * (2.0 ** 24))))};
  endfunction

  // 32-bit mixing hash for generated data
  function automatic logic [31:0] mix(logic [31:0] a, logic [31:0] b, logic [31:0] c);
    logic [31:0] h = a * 32'h9E3779B1 ^ (b * 32'h85EBCA77) ^ (c * 32'hC2B2AE3D);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 13);
    return h;
  endfunction

  // FP16 with random sign, exponent in [emin, emax], random mantissa
  function automatic logic [15:0] gen_fp16(logic [31:0] h, int emin, int emax);
    int e = emin + int'(h[7:0]) % (emax - emin + 1);
    return {h[31], 5'(e), h[25:16]};
  endfunction

endpackage
