// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// The 24x24-bit significand product is normalised by at most one bit and rounded
// to nearest, ties to even. Subnormal inputs are read as zero and subnormal
// results are flushed to zero (signed). Infinities propagate; NaN inputs and
// 0 x inf give the quiet NaN 0x7FC00000. FP32 arithmetic follows the paper's
// FP32 MAC; the flush-to-zero policy is this design's own simplification.
module fp32_mul
  import hecaton_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sy;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic signed [10:0] ey;
  logic [24:0] mrnd;

  always_comb begin
    ea = a[30:23];
    eb = b[30:23];
    sy = a[31] ^ b[31];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == '0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != '0);
    prod   = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    ey     = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      ey     = ey + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    mrnd = {1'b0, mant} + {24'd0, guard & (sticky | mant[0])};
    if (mrnd[24]) begin
      mrnd = mrnd >> 1;
      ey   = ey + 11'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero || ey <= 11'sd0)
      y = {sy, 31'd0};
    else if (ey >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};
    else
      y = {sy, ey[7:0], mrnd[22:0]};
  end
endmodule
