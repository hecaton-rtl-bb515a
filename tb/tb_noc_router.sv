// tb_noc_router: the on-die NoC with two small reference buffers.
// Checks: plain flits from the NoP are written into the addressed buffer;
// accumulate flits add their payload lane by lane (FP32) into the stored line;
// each finished flit pulses rx_done once; controller reads and writes are
// granted only when no flit is pending and return read data one cycle after
// the grant; controller flits reach the NoP local input unchanged.
module tb_noc_router;
  import hecaton_pkg::*;
  import tb_fp_pkg::*;

  localparam int DEPTH = 64;
  logic     clk = 1'b0, rst_n = 1'b0;
  logic     rx_valid = 1'b0, rx_ready, tx_valid, tx_ready = 1'b1, rx_done;
  buf_sel_e rx_done_buf;
  flit_t    rx_flit = '0, tx_flit, c_tx_flit = '0;
  logic     c_req = 1'b0, c_we = 1'b0, c_gnt, c_tx_valid = 1'b0, c_tx_ready;
  buf_sel_e c_buf = BUF_ACT;
  addr_t    c_addr = '0;
  line_t    c_wdata = '0, c_rdata;
  logic     ab_en, ab_we, wb_en, wb_we;
  addr_t    ab_addr, wb_addr;
  line_t    ab_wdata, ab_rdata, wb_wdata, wb_rdata;
  line_t    ref_a [DEPTH], ref_w [DEPTH];
  int checks = 0, failures = 0, done_cnt = 0;

  noc_router dut (.*);
  global_buffer #(.DEPTH(DEPTH)) u_a (.clk, .en(ab_en), .we(ab_we), .addr(ab_addr), .wdata(ab_wdata), .rdata(ab_rdata));
  global_buffer #(.DEPTH(DEPTH)) u_w (.clk, .en(wb_en), .we(wb_we), .addr(wb_addr), .wdata(wb_wdata), .rdata(wb_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && rx_done) done_cnt++;

  initial begin
    #1000000;
    $display("stuck: done %0d rxv %0d rxr %0d st %0d t %0t", done_cnt, rx_valid, rx_ready, dut.st, $time);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LANES; i++) l[i*FP_W +: FP_W] = rnd_fp(10);
    return l;
  endfunction

  task automatic rx(buf_sel_e b, int a, bit acc, line_t d);
    @(negedge clk);
    rx_flit = '{dst_x: '0, dst_y: '0, to_io: 1'b0, buf_sel: b, accum: acc, addr: addr_t'(a), data: d};
    rx_valid = 1'b1;
    forever begin
      #1;
      if (rx_ready) break;
      @(negedge clk);
    end
    @(posedge clk); #1;
    rx_valid = 1'b0;
    if (b == BUF_ACT) begin
      if (acc) for (int i = 0; i < LANES; i++)
        ref_a[a][i*FP_W +: FP_W] = fadd(ref_a[a][i*FP_W +: FP_W], d[i*FP_W +: FP_W]);
      else ref_a[a] = d;
    end else begin
      if (acc) for (int i = 0; i < LANES; i++)
        ref_w[a][i*FP_W +: FP_W] = fadd(ref_w[a][i*FP_W +: FP_W], d[i*FP_W +: FP_W]);
      else ref_w[a] = d;
    end
  endtask

  task automatic c_read(buf_sel_e b, int a, output line_t d);
    @(negedge clk);
    c_req = 1'b1; c_we = 1'b0; c_buf = b; c_addr = addr_t'(a);
    forever begin
      #1;
      if (c_gnt) break;
      @(negedge clk);
    end
    @(posedge clk); #1;
    c_req = 1'b0;
    d = c_rdata;
  endtask

  initial begin
    line_t d;
    int n_rx;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    n_rx = 0;
    // fill both buffers through the NoP
    for (int a = 0; a < DEPTH; a++) begin
      rx(BUF_ACT, a, 0, rnd_line());
      rx(BUF_WEI, a, 0, rnd_line());
      n_rx += 2;
    end
    // accumulate (reduce-scatter style) into random lines
    for (int t = 0; t < 60; t++) begin
      rx(buf_sel_e'($urandom_range(1)), $urandom_range(DEPTH - 1), 1, rnd_line());
      n_rx++;
    end
    @(posedge clk);
    checks++;
    if (done_cnt != n_rx) begin failures++; $display("rx_done %0d of %0d", done_cnt, n_rx); end
    // controller reads back everything, while more flits arrive and get priority
    fork
      begin
        for (int a = 0; a < DEPTH; a++) begin
          line_t ea, ew;
          c_read(BUF_ACT, a, d);
          ea = ref_a[a];
          checks++;
          if (d !== ea) begin failures++; if (failures < 5) $display("act %0d", a); end
          c_read(BUF_WEI, a, d);
          ew = ref_w[a];
          checks++;
          if (d !== ew) begin failures++; if (failures < 5) $display("wei %0d", a); end
        end
      end
      begin
        // accumulate into line 0 of the activation buffer, which the reader
        // visits first, so its expected value is taken before these land
        repeat (20) @(posedge clk);
        for (int t = 0; t < 10; t++) begin
          rx(BUF_WEI, 0, 1, rnd_line());
          repeat ($urandom_range(3)) @(posedge clk);
        end
      end
    join
    // grant must be held off while a flit is pending, and given right after
    @(negedge clk);
    rx_flit.accum = 1'b0; rx_flit.buf_sel = BUF_ACT; rx_flit.addr = addr_t'(5);
    rx_valid = 1'b1; c_req = 1'b1; c_we = 1'b0; c_buf = BUF_ACT; c_addr = '0;
    #1;
    checks++;
    if (c_gnt || !rx_ready) failures++;
    @(posedge clk); #1;
    rx_valid = 1'b0;
    #1;
    checks++;
    if (!c_gnt) failures++;
    @(posedge clk); #1;
    c_req = 1'b0;
    // transmit path
    @(negedge clk);
    c_tx_flit = '{dst_x: 5'd3, dst_y: 5'd2, to_io: 1'b0, buf_sel: BUF_WEI, accum: 1'b1, addr: 16'h1234, data: rnd_line()};
    c_tx_valid = 1'b1;
    @(posedge clk); #1;
    c_tx_valid = 1'b0;
    checks++;
    if (!tx_valid || tx_flit !== c_tx_flit) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
