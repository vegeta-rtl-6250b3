// vegeta_bf16_mul: BF16 x BF16 product delivered as an FP32 number.
//
// Both significands are 8 bits wide, so their 16-bit product fits the 24-bit FP32
// significand and the result is exact: no rounding happens here.  Combinational.
// Sub-normal inputs are taken as zero and a result below the FP32 normal range is flushed
// to a signed zero; overflow gives infinity; a NaN input, or infinity times zero, gives the
// quiet NaN 0x7FC00000.  The paper only states that operands are BF16 and accumulation is
// FP32; the handling of special values is this design's own choice.
module vegeta_bf16_mul
  import vegeta_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output fp32_t p
);
  logic       sa, sb, sp;
  logic [7:0] ea, eb;
  logic [6:0] fa, fb;
  logic [15:0] prod;
  logic signed [10:0] ep;
  logic [22:0] fp;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sp     = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == 7'd0);
    b_inf  = (eb == 8'hFF) && (fb == 7'd0);
    a_nan  = (ea == 8'hFF) && (fa != 7'd0);
    b_nan  = (eb == 8'hFF) && (fb != 7'd0);
    prod   = {1'b1, fa} * {1'b1, fb};          // value in [1,4), 14 fraction bits
    ep     = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (prod[15]) begin
      ep = ep + 11'sd1;
      fp = {prod[14:0], 8'd0};
    end else begin
      fp = {prod[13:0], 9'd0};
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      p = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      p = {sp, 8'hFF, 23'd0};
    else if (a_zero || b_zero || ep <= 11'sd0)
      p = {sp, 31'd0};
    else if (ep >= 11'sd255)
      p = {sp, 8'hFF, 23'd0};
    else
      p = {sp, ep[7:0], fp};
  end
endmodule
