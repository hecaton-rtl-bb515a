// tb_pe_array: drives the 4x4 PE array as the controller does (ROWS activation
// lines, then COLS weight lines per k, then one step) for a random
// X[4][K] x W[K][128] product with K = 40, which crosses one activation-line
// boundary, and compares all 16 output lines with a reference matrix product
// accumulated in the same order, element by element with single rounding.
module tb_pe_array;
  import hecaton_pkg::*;
  import tb_fp_pkg::*;

  localparam int ROWS = 4, COLS = 4, K = 40;
  localparam int N = COLS * LANES;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, ld_x = 1'b0, ld_w = 1'b0, step = 1'b0;
  logic [1:0] ld_x_row = '0, ld_w_col = '0, out_r = '0, out_c = '0;
  logic [4:0] step_kk = '0;
  line_t ld_x_line = '0, ld_w_line = '0, out_line;
  fp32_t X [ROWS][K];
  fp32_t W [K][N];
  fp32_t Y [ROWS][N];
  int checks = 0, failures = 0;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) X[r][k] = rnd_fp(8);
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) W[k][n] = rnd_fp(8);
    for (int r = 0; r < ROWS; r++) for (int n = 0; n < N; n++) begin
      Y[r][n] = '0;
      for (int k = 0; k < K; k++) Y[r][n] = fadd(Y[r][n], fmul(X[r][k], W[k][n]));
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    clear = 1'b1; @(posedge clk); #1 clear = 1'b0;
    for (int k = 0; k < K; k++) begin
      if (k % LANES == 0) begin
        for (int r = 0; r < ROWS; r++) begin
          ld_x = 1'b1; ld_x_row = 2'(r);
          for (int l = 0; l < LANES; l++)
            ld_x_line[l*FP_W +: FP_W] = (k + l < K) ? X[r][k+l] : 32'd0;
          @(posedge clk); #1 ld_x = 1'b0;
        end
      end
      for (int c = 0; c < COLS; c++) begin
        ld_w = 1'b1; ld_w_col = 2'(c);
        for (int l = 0; l < LANES; l++) ld_w_line[l*FP_W +: FP_W] = W[k][c*LANES+l];
        @(posedge clk); #1 ld_w = 1'b0;
      end
      step = 1'b1; step_kk = 5'(k % LANES);
      @(posedge clk); #1 step = 1'b0;
    end
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      out_r = 2'(r); out_c = 2'(c); #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (out_line[l*FP_W +: FP_W] !== Y[r][c*LANES+l]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
