// tb_vegeta_util_pkg: helpers shared by the VEGETA testbenches.
//
// Conversions between FP32/BF16 bit patterns and real numbers written from the bit fields
// (independent of the RTL), rounding to nearest even with flush to zero, and small-integer
// encoders.  Integers of magnitude below 256 are exact in BF16 and below 2^24 in FP32, so
// tests that use integer data have an exact, order-independent reference.
//
// BF16 and FP32 are the formats the paper uses; nothing else here comes from it.
package tb_vegeta_util_pkg;

  function automatic real fp32_to_real(logic [31:0] x);
    logic [10:0] e;
    if (x[30:23] == 8'd0) return 0.0;
    e = 11'(x[30:23]) - 11'd127 + 11'd1023;
    return $bitstoreal({x[31], e, x[22:0], 29'd0});
  endfunction

  function automatic real bf16_to_real(logic [15:0] x);
    return fp32_to_real({x, 16'h0000});
  endfunction

  function automatic logic [31:0] real_to_fp32(real r);
    logic [63:0] d;
    logic signed [12:0] e;
    logic [23:0] m;
    logic [28:0] rest;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return 32'd0;
    e = 13'(d[62:52]) - 13'sd1023 + 13'sd127;
    m = {1'b1, d[51:29]};
    rest = d[28:0];
    if (rest > 29'h1000_0000 || (rest == 29'h1000_0000 && m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin
        m = 24'h80_0000;
        e = e + 13'sd1;
      end
    end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic logic [31:0] fp32_of_int(int v);
    return real_to_fp32(real'(v));
  endfunction

  function automatic logic [15:0] bf16_of_int(int v);
    logic [31:0] f;
    f = fp32_of_int(v);
    return f[31:16];
  endfunction

  // reference MAC step: exact product, one FP32 rounding of the sum
  function automatic logic [31:0] ref_mac(logic [15:0] a, logic [15:0] w, logic [31:0] c);
    return real_to_fp32(bf16_to_real(a) * bf16_to_real(w) + fp32_to_real(c));
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    return real_to_fp32(fp32_to_real(a) + fp32_to_real(b));
  endfunction

  // random non-zero small integer in [-lim, lim]
  function automatic int rnz(int lim);
    int v;
    v = $urandom_range(1, lim);
    return ($urandom_range(0, 1) == 1) ? -v : v;
  endfunction

endpackage
