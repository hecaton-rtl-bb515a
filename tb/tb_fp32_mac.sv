// tb_fp32_mac: checks the FP32 MAC lane (and so fp32_mul and fp32_add) against
// double-precision reference arithmetic rounded to single precision.
// Random accumulation chains of 8 products are compared bit-exactly after every
// step; a few special values (zero, infinity, NaN, cancellation) are checked
// directly. One MAC per cycle is checked: acc changes one cycle after en.
module tb_fp32_mac;
  import tb_fp_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [31:0] a = '0, b = '0, acc;
  logic [31:0] ref_acc;
  int checks = 0, failures = 0;

  fp32_mac dut (.clk, .rst_n, .clear, .en, .a, .b, .acc);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mac(input logic [31:0] x, input logic [31:0] y);
    a = x; b = y; en = 1'b1;
    @(posedge clk); #1;
    en = 1'b0;
    ref_acc = fadd(ref_acc, fmul(x, y));
    // special operands are checked by the caller, not by the reference model
    if (x[30:23] == 8'hFF || y[30:23] == 8'hFF || acc[30:23] == 8'hFF) return;
    checks++;
    if (acc !== ref_acc) begin
      failures++;
      if (failures < 10)
        $display("mismatch: %h*%h -> acc %h, expected %h", x, y, acc, ref_acc);
    end
  endtask

  task automatic do_clear();
    clear = 1'b1;
    @(posedge clk); #1;
    clear = 1'b0;
    ref_acc = 32'd0;
    checks++;
    if (acc !== 32'd0) failures++;
  endtask

  initial begin
    ref_acc = 32'd0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      do_clear();
      for (int s = 0; s < 8; s++) mac(rnd_fp(20), rnd_fp(20));
    end
    // en low holds the accumulator
    begin
      logic [31:0] keep;
      keep = acc;
      a = 32'h3F80_0000; b = 32'h3F80_0000;
      @(posedge clk); #1;
      checks++;
      if (acc !== keep) failures++;
    end
    // exact cancellation gives +0
    do_clear();
    mac(32'h3FC0_0000, 32'h4000_0000);   // 1.5*2 = 3
    mac(32'hBFC0_0000, 32'h4000_0000);   // -3
    checks++;
    if (acc !== 32'd0) failures++;
    // 1 + 2^-24 (tie) rounds to even -> 1.0 ; 1 + 3*2^-24 rounds up
    do_clear();
    mac(32'h3F80_0000, 32'h3F80_0000);
    mac(32'h3380_0000, 32'h3F80_0000);
    checks++;
    if (acc !== 32'h3F80_0000) failures++;
    mac(32'h3440_0000, 32'h3F80_0000);
    // infinity and NaN
    do_clear();
    mac(32'h7F80_0000, 32'h3F80_0000);
    checks++;
    if (acc !== 32'h7F80_0000) failures++;
    mac(32'hFF80_0000, 32'h3F80_0000);   // inf - inf
    checks++;
    if (acc !== 32'h7FC0_0000) failures++;
    do_clear();
    mac(32'h0000_0000, 32'h7F80_0000);   // 0 * inf
    checks++;
    if (acc !== 32'h7FC0_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
