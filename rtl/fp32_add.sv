// fp32_add: combinational IEEE-754 single-precision adder.
//
// The operands are ordered by magnitude, the smaller significand is aligned into
// a 50-bit field (26 bits below the hidden bit; anything shifted further is kept
// as one sticky bit), added or subtracted, renormalised with a leading-zero
// count and rounded to nearest, ties to even. Subnormals are read and written as
// zero, x - x gives +0, infinities propagate and inf - inf or a NaN input gives
// 0x7FC00000. Used by the MAC lanes, the SIMD unit and the reduce-scatter
// accumulation in the NoC; the flush-to-zero policy is this design's choice.
module fp32_add
  import hecaton_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        swap, sub, sx;
  fp32_t       x, z;          // |x| >= |z|
  logic [7:0]  ex, ez, d;
  logic [49:0] mx, mz;
  logic [50:0] s;
  logic [5:0]  lz;
  logic [23:0] mant;
  logic        guard, sticky, x_inf, z_inf, x_nan, z_nan;
  logic signed [10:0] ey;
  logic [24:0] mrnd;

  always_comb begin
    swap = (b[30:0] > a[30:0]);
    x    = swap ? b : a;
    z    = swap ? a : b;
    ex   = x[30:23];
    ez   = z[30:23];
    sx   = x[31];
    sub  = x[31] ^ z[31];
    x_inf = (ex == 8'hFF) && (x[22:0] == '0);
    z_inf = (ez == 8'hFF) && (z[22:0] == '0);
    x_nan = (ex == 8'hFF) && (x[22:0] != '0);
    z_nan = (ez == 8'hFF) && (z[22:0] != '0);
    mx   = (ex == 8'd0) ? 50'd0 : {1'b1, x[22:0], 26'd0};
    d    = ex - ez;
    if (ez == 8'd0)
      mz = 50'd0;
    else if (d > 8'd26)
      mz = 50'd1;                                   // sticky only
    else
      mz = {1'b1, z[22:0], 26'd0} >> d;
    s  = sub ? ({1'b0, mx} - {1'b0, mz}) : ({1'b0, mx} + {1'b0, mz});
    lz = 6'd51;
    for (int i = 0; i <= 50; i++)
      if (s[i]) lz = 6'(50 - i);
    s      = s << lz;
    mant   = s[50:27];
    guard  = s[26];
    sticky = |s[25:0];
    ey     = $signed({3'b000, ex}) + 11'sd1 - $signed({5'b00000, lz});
    mrnd   = {1'b0, mant} + {24'd0, guard & (sticky | mant[0])};
    if (mrnd[24]) begin
      mrnd = mrnd >> 1;
      ey   = ey + 11'sd1;
    end
    if (x_nan || z_nan || (x_inf && z_inf && sub))
      y = 32'h7FC0_0000;
    else if (x_inf)
      y = x;
    else if (lz == 6'd51)
      y = 32'd0;                                    // exact zero
    else if (ex == 8'd0 || ey <= 11'sd0)
      y = {sx, 31'd0};
    else if (ey >= 11'sd255)
      y = {sx, 8'hFF, 23'd0};
    else
      y = {sx, ey[7:0], mrnd[22:0]};
  end
endmodule
