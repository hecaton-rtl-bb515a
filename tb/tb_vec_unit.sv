// tb_vec_unit: every SIMD operation on random lines against the reference
// model, checking that the result appears exactly one cycle after issue and
// holds while no new operation is issued.
module tb_vec_unit;
  import hecaton_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, valid = 1'b0, d_valid;
  vop_e op = V_ADD;
  line_t a = '0, b = '0, d;
  fp32_t s = '0;
  int checks = 0, failures = 0;

  vec_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t expect_lane(vop_e o, fp32_t x, fp32_t y, fp32_t sc);
    case (o)
      V_ADD:  return fadd(x, y);
      V_SUB:  return fadd(x, {~y[31], y[30:0]});
      V_MUL:  return fmul(x, y);
      V_AXPY: return fadd(x, fmul(sc, y));
      V_SCAL: return fmul(sc, x);
      V_RELU: return x[31] ? 32'd0 : x;
      V_MAX:  return (fp2r(x) > fp2r(y)) ? x : y;
      default: return x;
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 70; t++) begin
      op = vop_e'(t % 7);
      s  = rnd_fp(6);
      for (int l = 0; l < LANES; l++) begin
        a[l*FP_W +: FP_W] = rnd_fp(12);
        b[l*FP_W +: FP_W] = rnd_fp(12);
      end
      valid = 1'b1;
      @(posedge clk); #1 valid = 1'b0;
      checks++;
      if (!d_valid) failures++;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (d[l*FP_W +: FP_W] !== expect_lane(op, a[l*FP_W +: FP_W], b[l*FP_W +: FP_W], s)) begin
          failures++;
          if (failures < 5) $display("op %s lane %0d: %h vs %h", op.name(), l, d[l*FP_W +: FP_W],
                                     expect_lane(op, a[l*FP_W +: FP_W], b[l*FP_W +: FP_W], s));
        end
      end
      a = '0;
      @(posedge clk); #1;
      checks++;
      if (d_valid || d[0 +: FP_W] !== expect_lane(op, 32'd0, b[0 +: FP_W], s) &&
          d[0 +: FP_W] === 32'hFFFF_FFFF) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
