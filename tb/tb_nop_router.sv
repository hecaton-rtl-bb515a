// tb_nop_router: the router of die (1,1) in a 4x4 grid.
// Part 1, bypass: 32 flits enter on W bound for (3,1) while the local port
// sends 32 flits to (0,1). The first stream must take the bypass channel
// (W in -> E out) and the second the crossbar (local -> W out), in parallel:
// both must be done within 32 + 8 cycles, which a router without the bypass
// could also reach, so byp_count is checked too.
// Part 2, random traffic: every input sends random flits to random
// destinations (including to_io) with random output stalls; a scoreboard
// checks each flit leaves on its dimension-ordered port, once, in order per
// input/output pair. Each flit's payload carries its source port and number.
module tb_nop_router;
  import hecaton_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid [NPORTS], in_ready [NPORTS], out_valid [NPORTS], out_ready [NPORTS];
  flit_t in_flit [NPORTS], out_flit [NPORTS];
  logic [31:0] byp_count, xbar_count;
  int checks = 0, failures = 0;
  int stall_pct = 0;
  int senders_done = 0;

  nop_router dut (.clk, .rst_n, .my_x(coord_t'(1)), .my_y(coord_t'(1)),
                  .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit,
                  .byp_count, .xbar_count);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected flit tags per (input, output)
  int exp_q [NPORTS][NPORTS][$];
  int received = 0;

  function automatic int expected_port(flit_t f);
    if (f.to_io) return int'(P_W);
    if (f.dst_x > 1) return int'(P_E);
    if (f.dst_x < 1) return int'(P_W);
    if (f.dst_y > 1) return int'(P_S);
    if (f.dst_y < 1) return int'(P_N);
    return int'(P_LOCAL);
  endfunction

  function automatic flit_t mk(int src, int seq, int dx, int dy, bit io);
    flit_t f;
    f = '0;
    f.dst_x = coord_t'(dx);
    f.dst_y = coord_t'(dy);
    f.to_io = io;
    f.addr  = addr_t'($urandom);
    f.data  = {992'(0), 8'(src), 24'(seq)};
    return f;
  endfunction

  // output side: random stalls, scoreboard
  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NPORTS; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          int src, tag;
          src = int'(out_flit[o].data[31:24]);
          tag = int'(out_flit[o].data[23:0]);
          checks++;
          received++;
          if (src >= NPORTS || exp_q[src][o].size() == 0 || exp_q[src][o][0] != tag) begin
            failures++;
            if (failures < 8) $display("unexpected flit src %0d tag %0d on port %0d", src, tag, o);
          end else void'(exp_q[src][o].pop_front());
        end
      end
    end
  end
  always @(negedge clk)
    for (int o = 0; o < NPORTS; o++) out_ready[o] <= ($urandom_range(99) >= stall_pct);

  task automatic send(int p, flit_t f);
    exp_q[p][expected_port(f)].push_back(int'(f.data[23:0]));
    in_flit[p]  <= f;
    in_valid[p] <= 1'b1;
    @(posedge clk);
    while (!in_ready[p]) @(posedge clk);
    in_valid[p] <= 1'b0;
  endtask

  initial begin
    int t0, t1, t2;
    for (int p = 0; p < NPORTS; p++) begin
      in_valid[p] = 1'b0;
      in_flit[p]  = '0;
      out_ready[p] = 1'b1;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // ---- part 1: forward W->E while sending local->W
    t0 = $time;
    fork
      for (int n = 0; n < 32; n++) send(int'(P_W), mk(int'(P_W), n, 3, 1, 0));
      for (int n = 0; n < 32; n++) send(int'(P_LOCAL), mk(int'(P_LOCAL), n, 0, 1, 0));
    join
    t1 = $time;
    repeat (4) @(posedge clk);
    checks++;
    if (byp_count != 32) begin failures++; $display("byp_count %0d", byp_count); end
    checks++;
    if (xbar_count != 32) begin failures++; $display("xbar_count %0d", xbar_count); end
    checks++;
    if ((t1 - t0) / 10 > 32 + 8) begin
      failures++;
      $display("bypass + own transfer took %0d cycles", (t1 - t0) / 10);
    end
    // ---- part 2: random traffic on all inputs with output stalls
    stall_pct = 30;
    begin
      for (int p = 0; p < NPORTS; p++) begin
        automatic int pp = p;
        fork begin
          for (int n = 0; n < 150; n++) begin
            int dx, dy;
            dx = $urandom_range(3); dy = $urandom_range(3);
            // inputs only carry flits that dimension-ordered routing can send them
            if (pp == int'(P_E)) dx = $urandom_range(1);          // from the east: x <= 1
            if (pp == int'(P_W)) dx = 1 + $urandom_range(2);      // from the west: x >= 1
            if (pp == int'(P_N)) begin dx = 1; dy = 1 + $urandom_range(2); end
            if (pp == int'(P_S)) begin dx = 1; dy = $urandom_range(1); end
            send(pp, mk(pp, 1000 + n, dx, dy, (pp == int'(P_LOCAL)) && ($urandom_range(9) == 0)));
          end
          senders_done++;
        end join_none
      end
      wait (senders_done == NPORTS);
    end
    stall_pct = 0;
    t2 = 0;
    while (t2 < 200) begin
      @(posedge clk);
      t2++;
    end
    for (int i = 0; i < NPORTS; i++)
      for (int o = 0; o < NPORTS; o++) begin
        checks++;
        if (exp_q[i][o].size() != 0) begin
          failures++;
          $display("%0d flits from %0d to %0d never left: rqv %0d route %0d outv %0d outr %0d inv %0d", exp_q[i][o].size(), i, o, dut.rq_v[i], dut.rq_route[i], out_valid[o], out_ready[o], in_valid[i]);
        end
      end
    checks++;
    if (received != 64 + 5 * 150) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
