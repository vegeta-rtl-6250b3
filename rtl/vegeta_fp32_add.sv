// vegeta_fp32_add: FP32 adder, round to nearest even, combinational.
//
// The operand of smaller magnitude is aligned to the larger one with three extra bits
// (guard, round, sticky), the significands are added or subtracted, the result is
// normalised with a leading-zero count and rounded to nearest, ties to even.
// Sub-normal inputs are taken as zero and a result below the normal range is flushed to a
// signed zero; an exact cancellation gives +0.  Infinities and NaNs follow IEEE 754
// (inf - inf and any NaN give the quiet NaN 0x7FC00000).  The paper asks for FP32
// accumulation only; the rounding mode and flush-to-zero are this design's choices.
module vegeta_fp32_add
  import vegeta_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);
  logic        sx, sy, sr;
  logic [7:0]  ex, ey;
  logic [22:0] fx, fy;
  logic        x_zero, y_zero, x_inf, y_inf, x_nan, y_nan;
  logic [26:0] mx, my, my_sh;
  logic [27:0] sum;
  logic [7:0]  d;
  logic        sticky;
  logic signed [10:0] er;
  logic [4:0]  lz;
  logic [26:0] nm;
  logic [24:0] rnd;
  logic        up;
  logic        found;

  always_comb begin
    found = 1'b0;
    lz    = 5'd0;
    // order the operands so that x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin
      {sx, ex, fx} = a;
      {sy, ey, fy} = b;
    end else begin
      {sx, ex, fx} = b;
      {sy, ey, fy} = a;
    end
    x_zero = (ex == 8'd0);
    y_zero = (ey == 8'd0);
    x_inf  = (ex == 8'hFF) && (fx == 23'd0);
    y_inf  = (ey == 8'hFF) && (fy == 23'd0);
    x_nan  = (ex == 8'hFF) && (fx != 23'd0);
    y_nan  = (ey == 8'hFF) && (fy != 23'd0);

    mx = {1'b1, fx, 3'b000};
    my = y_zero ? 27'd0 : {1'b1, fy, 3'b000};
    d  = ex - ey;
    if (d >= 8'd27) begin
      my_sh  = 27'd0;
      sticky = (my != 27'd0);
    end else begin
      my_sh  = my >> d;
      sticky = ((my & ((27'd1 << d) - 27'd1)) != 27'd0);
    end
    my_sh[0] = my_sh[0] | sticky;

    sr  = sx;
    er  = 11'(signed'({3'b000, ex}));
    if (sx == sy) sum = {1'b0, mx} + {1'b0, my_sh};
    else          sum = {1'b0, mx} - {1'b0, my_sh};

    if (sum[27]) begin
      nm = {sum[27:2], sum[1] | sum[0]};
      er = er + 11'sd1;
    end else begin
      for (int i = 0; i < 27; i++)                // leading-zero count of sum[26:0]
        if (!found && sum[26-i]) begin
          lz    = 5'(i);
          found = 1'b1;
        end
      nm = sum[26:0] << lz;
      er = er - 11'(lz);
    end

    up  = nm[2] && (nm[1] || nm[0] || nm[3]);
    rnd = {1'b0, nm[26:3]} + 25'(up);
    if (rnd[24]) begin
      er  = er + 11'sd1;
      rnd = rnd >> 1;
    end

    if (x_nan || y_nan || (x_inf && y_inf && (sx != sy)))
      s = 32'h7FC0_0000;
    else if (x_inf)
      s = {sx, 8'hFF, 23'd0};
    else if (x_zero)
      s = {sx & sy, 31'd0};                     // both operands zero
    else if (sum == 28'd0)
      s = 32'd0;                                // exact cancellation
    else if (er >= 11'sd255)
      s = {sr, 8'hFF, 23'd0};
    else if (er <= 11'sd0)
      s = {sr, 31'd0};
    else
      s = {sr, er[7:0], rnd[22:0]};
  end
endmodule
