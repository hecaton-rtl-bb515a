// tb_hecaton_top: one forward pass of a linear layer, Y = X * W, on a P x P die
// grid with the 2D tiling of the training method (Algorithm 1, Steps 1-5):
//   Step 1/2 scatter: die (row i, col j) receives W(kblock j, nblock i) and
//            X(mblock i, kblock j) from the west IO port of its row, plus a
//            zeroed receive area for reduce-scatter partial sums.
//   Step 3   all-gather of X(:, kblock j) within column j, on the bypass ring.
//   compute  P MATMULs: partial sums Yp(:, j, i) = X(:, j) * W(j, i).
//   Step 4   ring reduce-scatter within row i: each step sends one chunk
//            (4 rows x 128 columns) with accumulate flits into the next die's
//            receive area, then adds it to the local partial with the SIMD unit.
//   Step 5   gather: each die sends its finished chunk to the IO die (to_io).
// Sizes: 4 rows per m-block, 32 per k-block (one line), 128 per n-block, so
// M = 4P, K = 32P, N = 128P. The bypass ring order is 0, 2, 4, .., 5, 3, 1.
// The expected Y is computed in the testbench with the same summation order
// (k ascending inside a die, then ring order), so the check is bit-exact.
// Mechanisms counted (each must occur): bypass forwarding, crossbar transfers,
// accumulate flits, controller stalled by NoP traffic on the buffers, WAIT
// stalls and link back-pressure (credits exhausted).
module tb_hecaton_top;
  import hecaton_pkg::*;
  import tb_fp_pkg::*;

  localparam int P = 2;
  localparam int ND = P * P;
  localparam int KB = LANES, NB = 4 * LANES, MB = 4;
  localparam int XB = 0, YB = 256, RB = 1024, WB = 0;  // buffer bases (lines)

  logic clk = 1'b0, rst_n = 1'b0;
  logic   io_w_in_valid [P], io_w_in_ready [P], io_w_out_valid [P], io_w_out_ready [P];
  flit_t  io_w_in_flit [P], io_w_out_flit [P];
  logic   io_e_in_valid [P], io_e_in_ready [P], io_e_out_valid [P], io_e_out_ready [P];
  flit_t  io_e_in_flit [P], io_e_out_flit [P];
  logic   prog_we = 1'b0, start = 1'b0;
  coord_t prog_x = '0, prog_y = '0;
  logic [5:0] prog_addr = '0;
  instr_t prog_instr = '0;
  logic [ND-1:0] done, busy;
  logic [31:0] byp_count [ND], xbar_count [ND];
  int checks = 0, failures = 0;

  hecaton_top #(.DIES_X(P), .DIES_Y(P), .BUF_DEPTH(2048)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired: done=%b gathered=%0d", done, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference data
  fp32_t X [MB*P][KB*P];
  fp32_t W [KB*P][NB*P];
  fp32_t Y [MB*P][NB*P];
  int ring [P];      // ring position -> index
  int pos  [P];      // index -> ring position

  function automatic line_t xline(int row, int kb);
    line_t l;
    for (int t = 0; t < LANES; t++) l[t*FP_W +: FP_W] = X[row][kb*KB + t];
    return l;
  endfunction

  function automatic line_t wline(int k, int nb, int c);
    line_t l;
    for (int t = 0; t < LANES; t++) l[t*FP_W +: FP_W] = W[k][nb*NB + c*LANES + t];
    return l;
  endfunction

  function automatic instr_t ins(opcode_e op, int cnt);
    instr_t x;
    x = '0;
    x.op = op;
    x.cnt = CNT_W'(cnt);
    return x;
  endfunction

  // ---------------- mechanism counters
  int n_ctrl_stall = 0, n_wait = 0, n_backpressure = 0, n_accum = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < P; i++) if (io_w_in_valid[i] && !io_w_in_ready[i]) n_backpressure++;
  end

  // per-die instrumentation through the hierarchy
  for (genvar yy = 0; yy < P; yy++) begin : g_my
    for (genvar xx = 0; xx < P; xx++) begin : g_mx
      always @(posedge clk) if (rst_n) begin
        if (dut.g_y[yy].g_x[xx].u_die.u_ctrl.c_req && !dut.g_y[yy].g_x[xx].u_die.u_ctrl.c_gnt)
          n_ctrl_stall++;
        if (dut.g_y[yy].g_x[xx].u_die.u_ctrl.st == 5'd6 && !dut.g_y[yy].g_x[xx].u_die.u_ctrl.consume)
          n_wait++;
        if (dut.g_y[yy].g_x[xx].u_die.u_noc.rx_done && dut.g_y[yy].g_x[xx].u_die.u_noc.st != 1'b0)
          n_accum++;
      end
    end
  end

  for (genvar yy = 0; yy < P; yy++) begin : g_dbg
    for (genvar xx = 0; xx < P; xx++) begin : g_dx
      always @(posedge clk) if (rst_n && ($time % 200000) == 5)
        $display("t=%0t die(%0d,%0d) pc=%0d st=%0d avail=%0d/%0d", $time, xx, yy,
                 dut.g_y[yy].g_x[xx].u_die.u_ctrl.pc, dut.g_y[yy].g_x[xx].u_die.u_ctrl.st,
                 dut.g_y[yy].g_x[xx].u_die.u_ctrl.rx_avail[0], dut.g_y[yy].g_x[xx].u_die.u_ctrl.rx_avail[1]);
    end
  end

  // ---------------- gather sink (west IO dies)
  int n_out = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < P; i++) if (io_w_out_valid[i] && io_w_out_ready[i]) begin
      int tag, drow, dcol, mb, r, c;
      flit_t f;
      f = io_w_out_flit[i];
      tag = int'(f.addr);
      drow = tag / (P * 16); mb = (tag / 16) % P; r = (tag % 16) / 4; c = tag % 4;
      // line holds Y(mb*4 + r, drow*NB + c*LANES + t)
      for (int t = 0; t < LANES; t++) begin
        checks++;
        if (f.data[t*FP_W +: FP_W] !== Y[mb*MB + r][drow*NB + c*LANES + t]) begin
          failures++;
          if (failures < 6) $display("Y(%0d,%0d) got %h expected %h", mb*MB + r,
                                     drow*NB + c*LANES + t, f.data[t*FP_W +: FP_W],
                                     Y[mb*MB + r][drow*NB + c*LANES + t]);
        end
      end
      n_out++;
    end
  end

  task automatic inject(int row, flit_t f);
    @(negedge clk);
    io_w_in_flit[row]  = f;
    io_w_in_valid[row] = 1'b1;
    forever begin
      #1;
      if (io_w_in_ready[row]) break;
      @(negedge clk);
    end
    @(posedge clk); #1;
    io_w_in_valid[row] = 1'b0;
  endtask

  task automatic load(int x, int y, int a, instr_t v);
    @(negedge clk);
    prog_we = 1'b1; prog_x = coord_t'(x); prog_y = coord_t'(y);
    prog_addr = 6'(a); prog_instr = v;
    @(posedge clk); #1;
    prog_we = 1'b0;
  endtask

  initial begin
    int t_start, t_end;
    for (int i = 0; i < P; i++) begin
      io_w_in_valid[i] = 1'b0; io_w_in_flit[i] = '0; io_w_out_ready[i] = 1'b1;
      io_e_in_valid[i] = 1'b0; io_e_in_flit[i] = '0; io_e_out_ready[i] = 1'b1;
    end
    // ring order 0,2,4,..,..,5,3,1
    begin
      int n;
      n = 0;
      for (int v = 0; v < P; v += 2) ring[n++] = v;
      for (int v = ((P - 1) % 2 == 1) ? P - 1 : P - 2; v > 0; v -= 2) ring[n++] = v;
      for (int q = 0; q < P; q++) pos[ring[q]] = q;
    end
    for (int m = 0; m < MB*P; m++) for (int k = 0; k < KB*P; k++) X[m][k] = rnd_fp(4);
    for (int k = 0; k < KB*P; k++) for (int n = 0; n < NB*P; n++) W[k][n] = rnd_fp(4);
    // reference: die (i, j) partial for m-block mb: sum over k in kblock j ascending;
    // chunk mb ends on the die at ring position mb; adds in ring order
    for (int i = 0; i < P; i++)
      for (int m = 0; m < MB*P; m++)
        for (int n = i*NB; n < (i+1)*NB; n++) begin
          fp32_t part [P];
          fp32_t acc;
          int mb;
          mb = m / MB;
          for (int j = 0; j < P; j++) begin
            part[j] = '0;
            for (int k = j*KB; k < (j+1)*KB; k++) part[j] = fadd(part[j], fmul(X[m][k], W[k][n]));
          end
          // chunk mb is started by ring position mb+1, finished by ring position mb
          acc = part[ring[(mb + 1) % P]];
          for (int s = 2; s <= P; s++) acc = fadd(part[ring[(mb + s) % P]], acc);
          Y[m][n] = acc;
        end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---------------- programs
    for (int y = 0; y < P; y++) for (int x = 0; x < P; x++) begin
      int a, pr, pc, nrow, ncol;
      instr_t v;
      a = 0;
      pr = pos[y]; pc = pos[x];
      nrow = ring[(pr + 1) % P];
      ncol = ring[(pc + 1) % P];
      // wait for the scatter from DRAM
      v = ins(OP_WAIT, MB);                          v.a_buf = BUF_ACT; load(x, y, a++, v);
      v = ins(OP_WAIT, KB*4 + 16*(P-1));             v.a_buf = BUF_WEI; load(x, y, a++, v);
      // all-gather X(:, j) within the column
      for (int s = 0; s < P - 1; s++) begin
        int blk;
        if (s > 0) begin v = ins(OP_WAIT, MB); v.a_buf = BUF_ACT; load(x, y, a++, v); end
        blk = ring[(pr - s + P) % P];
        v = ins(OP_SEND, MB);
        v.a_buf = BUF_ACT; v.a_addr = addr_t'(XB + MB*blk);
        v.d_buf = BUF_ACT; v.d_addr = addr_t'(XB + MB*blk);
        v.dst_x = coord_t'(x); v.dst_y = coord_t'(nrow);
        load(x, y, a++, v);
      end
      if (P > 1) begin v = ins(OP_WAIT, MB); v.a_buf = BUF_ACT; load(x, y, a++, v); end
      // partial sums for every m-block
      for (int mb = 0; mb < P; mb++) begin
        v = ins(OP_MATMUL, KB);
        v.a_buf = BUF_ACT; v.a_addr = addr_t'(XB + MB*mb); v.stride = 1;
        v.b_buf = BUF_WEI; v.b_addr = addr_t'(WB);
        v.d_buf = BUF_ACT; v.d_addr = addr_t'(YB + 16*mb);
        load(x, y, a++, v);
      end
      // ring reduce-scatter within the row
      for (int s = 0; s < P - 1; s++) begin
        int c;
        c = (pc - s - 1 + 2*P) % P;
        if (s > 0) begin
          v = ins(OP_WAIT, 16); v.a_buf = BUF_WEI; load(x, y, a++, v);
          v = ins(OP_VEC, 16); v.vop = V_ADD;
          v.a_buf = BUF_ACT; v.a_addr = addr_t'(YB + 16*c);
          v.b_buf = BUF_WEI; v.b_addr = addr_t'(RB + 16*(s-1));
          v.d_buf = BUF_ACT; v.d_addr = addr_t'(YB + 16*c);
          load(x, y, a++, v);
        end
        v = ins(OP_SEND, 16);
        v.a_buf = BUF_ACT; v.a_addr = addr_t'(YB + 16*c);
        v.d_buf = BUF_WEI; v.d_addr = addr_t'(RB + 16*s); v.accum = 1'b1;
        v.dst_x = coord_t'(ncol); v.dst_y = coord_t'(y);
        load(x, y, a++, v);
      end
      if (P > 1) begin
        v = ins(OP_WAIT, 16); v.a_buf = BUF_WEI; load(x, y, a++, v);
        v = ins(OP_VEC, 16); v.vop = V_ADD;
        v.a_buf = BUF_ACT; v.a_addr = addr_t'(YB + 16*pc);
        v.b_buf = BUF_WEI; v.b_addr = addr_t'(RB + 16*(P-2));
        v.d_buf = BUF_ACT; v.d_addr = addr_t'(YB + 16*pc);
        load(x, y, a++, v);
      end
      // gather the finished chunk (m-block pc of n-block y) to DRAM
      v = ins(OP_SEND, 16);
      v.a_buf = BUF_ACT; v.a_addr = addr_t'(YB + 16*pc);
      v.d_addr = addr_t'((y*P + pc) * 16); v.to_io = 1'b1;
      load(x, y, a++, v);
      load(x, y, a++, ins(OP_HALT, 0));
    end

    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    t_start = $time;

    // ---------------- scatter from DRAM through the west IO dies, one stream per row
    for (int y = 0; y < P; y++) begin
      automatic int yy = y;
      fork begin
        for (int x = 0; x < P; x++) begin
          flit_t f;
          f = '0; f.dst_x = coord_t'(x); f.dst_y = coord_t'(yy);
          for (int r = 0; r < MB; r++) begin
            f.buf_sel = BUF_ACT; f.addr = addr_t'(XB + MB*yy + r); f.data = xline(MB*yy + r, x);
            inject(yy, f);
          end
          for (int k = 0; k < KB; k++) for (int c = 0; c < 4; c++) begin
            f.buf_sel = BUF_WEI; f.addr = addr_t'(WB + 4*k + c); f.data = wline(x*KB + k, yy, c);
            inject(yy, f);
          end
          for (int z = 0; z < 16*(P-1); z++) begin
            f.buf_sel = BUF_WEI; f.addr = addr_t'(RB + z); f.data = '0;
            inject(yy, f);
          end
        end
      end join_none
    end

    wait (&done);
    t_end = $time;
    repeat (50) @(posedge clk);
    checks++;
    if (n_out != ND * 16) begin failures++; $display("gathered %0d lines of %0d", n_out, ND*16); end
    begin
      int nb, nx;
      nb = 0; nx = 0;
      for (int d = 0; d < ND; d++) begin nb += byp_count[d]; nx += xbar_count[d]; end
      $display("cycles %0d  bypass %0d  crossbar %0d  accum %0d  ctrl-stall %0d  wait %0d  backpressure %0d",
               (t_end - t_start) / 10, nb, nx, n_accum, n_ctrl_stall, n_wait, n_backpressure);
      checks++; if (nb == 0) begin failures++; $display("no bypass forwarding"); end
      checks++; if (nx == 0) begin failures++; $display("no crossbar transfer"); end
      checks++; if (n_accum != ND * 16 * (P - 1)) begin failures++; $display("accumulate flits %0d", n_accum); end
      checks++; if (n_ctrl_stall == 0) begin failures++; $display("controller never stalled"); end
      checks++; if (n_wait == 0) begin failures++; $display("no WAIT stall"); end
      checks++; if (n_backpressure == 0) begin failures++; $display("no link back-pressure"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
