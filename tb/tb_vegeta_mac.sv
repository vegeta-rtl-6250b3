// tb_vegeta_mac: self-checking test of one MAC unit (BF16 x BF16 + FP32).
//
// The reference is computed in double precision: the BF16 product is exact in double, the
// sum of two FP32-representable values rounded once to double and then once to FP32 gives
// the correctly rounded FP32 sum (double has more than 2*24+2 significand bits), and the
// double is rounded to FP32 with a round-to-nearest-even written here from the bit fields.
// Exponents are kept inside the normal range.  Also checks a few hand-picked values
// (exact integers, cancellation to +0, zero weight, infinity).
// The BF16 inputs and FP32 accumulation follow the paper; round to nearest even and flush
// to zero are this design's choices, and the reference follows them.
module tb_vegeta_mac;
  import vegeta_pkg::*;

  bf16_t a, w;
  fp32_t acc_in, acc_out;
  int checks = 0, failures = 0;

  vegeta_mac dut (.a(a), .w(w), .acc_in(acc_in), .acc_out(acc_out));

  function automatic real fp32_to_real(fp32_t x);
    logic [10:0] e;
    if (x[30:23] == 8'd0) return 0.0;
    e = 11'(x[30:23]) - 11'd127 + 11'd1023;
    return $bitstoreal({x[31], e, x[22:0], 29'd0});
  endfunction

  function automatic real bf16_to_real(bf16_t x);
    return fp32_to_real({x, 16'h0000});
  endfunction

  // round a double to FP32, nearest even, flushing results below the normal range
  function automatic fp32_t real_to_fp32(real r);
    logic [63:0] d;
    logic signed [12:0] e;
    logic [52:0] f;
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

  task automatic check(string what, fp32_t exp);
    #1;
    checks++;
    if (acc_out !== exp) begin
      failures++;
      $display("FAIL %s: a=%h w=%h c=%h got %h expected %h", what, a, w, acc_in, acc_out, exp);
    end
  endtask

  initial begin
    // exact small integers: 3 * -2 + 10 = 4
    a = 16'h4040; w = 16'hC000; acc_in = 32'h4120_0000; check("int", 32'h4080_0000);
    // 1.5 * 1.5 + 0 = 2.25
    a = 16'h3FC0; w = 16'h3FC0; acc_in = 32'h0;         check("frac", 32'h4010_0000);
    // cancellation: 2 * 2 - 4 = +0
    a = 16'h4000; w = 16'h4000; acc_in = 32'hC080_0000; check("cancel", 32'h0);
    // zero weight leaves the partial sum untouched
    a = 16'h1234; w = 16'h0000; acc_in = 32'h3F80_0001; check("zero", 32'h3F80_0001);
    // infinity input
    a = 16'h7F80; w = 16'h3F80; acc_in = 32'h3F80_0000; check("inf", 32'h7F80_0000);
    // random values, normal range
    for (int i = 0; i < 4000; i++) begin
      a      = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 7'($urandom)};
      w      = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 7'($urandom)};
      acc_in = {1'($urandom), 8'(100 + $urandom_range(0, 50)), 23'($urandom)};
      if (i % 8 == 0) acc_in = {~acc_in[31], acc_in[30:0]};
      check("rand", real_to_fp32(bf16_to_real(a) * bf16_to_real(w) + fp32_to_real(acc_in)));
    end
    // near-cancellation: c close to -a*w exercises long normalisation shifts
    for (int i = 0; i < 2000; i++) begin
      a      = {1'b0, 8'(120 + $urandom_range(0, 10)), 7'($urandom)};
      w      = {1'b0, 8'(120 + $urandom_range(0, 10)), 7'($urandom)};
      acc_in = real_to_fp32(-(bf16_to_real(a) * bf16_to_real(w)));
      acc_in = acc_in ^ 32'($urandom_range(0, 255));
      check("cancel-rand", real_to_fp32(bf16_to_real(a) * bf16_to_real(w) + fp32_to_real(acc_in)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
