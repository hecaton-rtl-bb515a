// tb_pe: checks one PE (32 FP32 MAC lanes sharing one activation) against the
// reference model: after K random steps every lane must hold the correctly
// rounded running sum of x[k]*w[k][lane]. Also checks that a step is visible
// exactly one cycle later and that clear zeroes all lanes.
module tb_pe;
  import hecaton_pkg::*;
  import tb_fp_pkg::*;

  localparam int K = 16;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  fp32_t x = '0;
  line_t w = '0, acc;
  fp32_t ref_acc [LANES];
  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .clear, .step, .x, .w, .acc);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 4; t++) begin
      clear = 1'b1; @(posedge clk); #1 clear = 1'b0;
      for (int l = 0; l < LANES; l++) ref_acc[l] = '0;
      checks++;
      if (acc !== '0) failures++;
      for (int k = 0; k < K; k++) begin
        x = rnd_fp(10);
        for (int l = 0; l < LANES; l++) w[l*FP_W +: FP_W] = rnd_fp(10);
        for (int l = 0; l < LANES; l++) ref_acc[l] = fadd(ref_acc[l], fmul(x, w[l*FP_W +: FP_W]));
        step = 1'b1;
        @(posedge clk); #1 step = 1'b0;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (acc[l*FP_W +: FP_W] !== ref_acc[l]) failures++;
        end
      end
      // no step: nothing changes
      x = rnd_fp(10);
      @(posedge clk); #1;
      checks++;
      if (acc[0 +: FP_W] !== ref_acc[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
