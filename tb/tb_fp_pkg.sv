// tb_fp_pkg: reference arithmetic for the testbenches, independent of the RTL.
//
// Single-precision values are widened exactly to double precision, the
// operation is done in double, and the result is rounded back to single with
// round-to-nearest-even and flush-to-zero. For one add or one multiply of two
// singles this double rounding gives the correctly rounded single result
// (53 >= 2*24 + 2). Also a small random generator of normal FP32 numbers with
// exponents in a range that keeps results away from overflow and subnormals.
package tb_fp_pkg;

  function automatic real fp2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2fp(input real r);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, st;
    int          e;
    logic [24:0] mr;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    mr = {1'b0, m} + {24'd0, g & (st | m[0])};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // random normal FP32 with unbiased exponent in [-span, span]
  function automatic logic [31:0] rnd_fp(input int span);
    int e;
    e = int'($urandom_range(2 * span)) - span;
    return {1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2fp(fp2r(a) * fp2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2fp(fp2r(a) + fp2r(b));
  endfunction

endpackage
