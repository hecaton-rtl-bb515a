// tb_global_buffer: writes random lines to random addresses of a buffer at its
// full 8 MB size (65536 lines of 1024 bits), reads them back against a
// reference copy, and checks the one-cycle read latency and that rdata holds
// while the buffer is not enabled.
module tb_global_buffer;
  import hecaton_pkg::*;

  localparam int DEPTH = 65536, NW = 600;
  logic  clk = 1'b0, en = 1'b0, we = 1'b0;
  addr_t addr = '0;
  line_t wdata = '0, rdata;
  addr_t adr [NW];
  line_t dat [NW];
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // distinct addresses, spread over the whole buffer (top and bottom included)
    for (int i = 0; i < NW; i++) adr[i] = addr_t'(i * 109 + (i % 2) * 32768);
    adr[0] = '0;
    adr[1] = addr_t'(DEPTH - 1);
    for (int i = 0; i < NW; i++)
      for (int j = 0; j < LINE_W / 32; j++) dat[i][j*32 +: 32] = $urandom;
    @(posedge clk); #1;
    for (int i = 0; i < NW; i++) begin
      en = 1'b1; we = 1'b1; addr = adr[i]; wdata = dat[i];
      @(posedge clk); #1;
    end
    en = 1'b0; we = 1'b0;
    for (int i = NW - 1; i >= 0; i--) begin
      en = 1'b1; addr = adr[i];
      @(posedge clk); #1;
      en = 1'b0;
      checks++;
      if (rdata !== dat[i]) failures++;
      addr = adr[(i + 1) % NW];
      @(posedge clk); #1;
      checks++;
      if (rdata !== dat[i]) failures++;   // holds when not enabled
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
