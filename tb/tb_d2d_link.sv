// tb_d2d_link: the D2D link at its default latency of 8 cycles.
// Checks: a single flit reaches the far side exactly LAT+1 cycles after it
// was accepted; with the receiver always ready the link accepts a flit every
// cycle for 200 cycles (credits never run out); with a receiver that stalls
// at random, nothing is lost, duplicated or reordered, and the sender is
// throttled once the credits are used up.
module tb_d2d_link;
  import hecaton_pkg::*;

  localparam int LAT = 8;
  logic  clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  flit_t in_flit = '0, out_flit;
  int checks = 0, failures = 0;
  int sent = 0, got = 0, stall_pct = 0, throttled = 0;

  d2d_link #(.LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_flit.data[31:0] != 32'(got)) failures++;
    got++;
  end
  always @(negedge clk) out_ready <= ($urandom_range(99) >= stall_pct);
  always @(posedge clk) if (rst_n && in_valid && !in_ready) throttled++;

  initial begin
    int t0, cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // latency of one flit
    in_valid <= 1'b1; in_flit <= '0;
    @(posedge clk);
    in_valid <= 1'b0;
    sent = 1;
    cyc = 0;
    while (!out_valid) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != LAT + 1) begin failures++; $display("latency %0d", cyc); end
    @(posedge clk);
    // full rate
    t0 = throttled;
    for (int n = 0; n < 200; n++) begin
      in_valid <= 1'b1; in_flit.data <= line_t'(sent);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent++;
    end
    in_valid <= 1'b0;
    checks++;
    if (throttled != t0) begin failures++; $display("throttled at full rate"); end
    // random stalls
    stall_pct = 70;
    for (int n = 0; n < 300; n++) begin
      in_valid <= 1'b1; in_flit.data <= line_t'(sent);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent++;
    end
    in_valid <= 1'b0;
    stall_pct = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (got != sent) begin failures++; $display("sent %0d got %0d", sent, got); end
    checks++;
    if (throttled == t0) begin failures++; $display("credits never ran out"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
