// compute_die: one computing die of the package (Fig. 5(c) of the design).
//
// Blocks: global weight buffer and global activation buffer (8 MB each),
// a ROWS x COLS PE array of FP32 MAC lanes, the SIMD vector unit, the
// controller, the on-die NoC and the five-ended NoP router. The die's four
// D2D sides (E, S, W, N) leave as valid/ready flit ports indexed by dir_e
// order 0=E, 1=S, 2=W, 3=N; the package top puts a d2d_link on each of them.
// The block list and their connections follow the paper's die figure; the
// widths, the line-based data movement and the program interface are this
// design's choices. my_x/my_y are the die's coordinates in the die grid.
module compute_die
  import hecaton_pkg::*;
#(
  parameter int unsigned BUF_DEPTH  = 65536,
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned PROG_DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  coord_t my_x,
  input  coord_t my_y,
  input  logic   d_in_valid  [4],
  output logic   d_in_ready  [4],
  input  flit_t  d_in_flit   [4],
  output logic   d_out_valid [4],
  input  logic   d_out_ready [4],
  output flit_t  d_out_flit  [4],
  input  logic   prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  instr_t prog_instr,
  input  logic   start,
  output logic   busy,
  output logic   done,
  output logic [31:0] byp_count,   // router: flits forwarded on the bypass channel
  output logic [31:0] xbar_count   // router: flits through the crossbar
);
  // buffers
  logic  ab_en, ab_we, wb_en, wb_we;
  addr_t ab_addr, wb_addr;
  line_t ab_wdata, ab_rdata, wb_wdata, wb_rdata;

  global_buffer #(.DEPTH(BUF_DEPTH)) u_wbuf (
    .clk, .en(wb_en), .we(wb_we), .addr(wb_addr), .wdata(wb_wdata), .rdata(wb_rdata));
  global_buffer #(.DEPTH(BUF_DEPTH)) u_abuf (
    .clk, .en(ab_en), .we(ab_we), .addr(ab_addr), .wdata(ab_wdata), .rdata(ab_rdata));

  // NoP router
  logic  r_in_v [NPORTS], r_in_r [NPORTS], r_out_v [NPORTS], r_out_r [NPORTS];
  flit_t r_in_f [NPORTS], r_out_f [NPORTS];

  for (genvar d = 0; d < 4; d++) begin : g_side
    assign r_in_v[d+1]    = d_in_valid[d];
    assign r_in_f[d+1]    = d_in_flit[d];
    assign d_in_ready[d]  = r_in_r[d+1];
    assign d_out_valid[d] = r_out_v[d+1];
    assign d_out_flit[d]  = r_out_f[d+1];
    assign r_out_r[d+1]   = d_out_ready[d];
  end

  nop_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_nop (
    .clk, .rst_n, .my_x, .my_y,
    .in_valid(r_in_v), .in_ready(r_in_r), .in_flit(r_in_f),
    .out_valid(r_out_v), .out_ready(r_out_r), .out_flit(r_out_f),
    .byp_count, .xbar_count);

  // NoC
  logic     c_req, c_we, c_gnt, c_tx_valid, c_tx_ready, rx_done;
  buf_sel_e rx_done_buf;
  buf_sel_e c_buf;
  addr_t    c_addr;
  line_t    c_wdata, c_rdata;
  flit_t    c_tx_flit;

  noc_router u_noc (
    .clk, .rst_n,
    .rx_valid(r_out_v[0]), .rx_ready(r_out_r[0]), .rx_flit(r_out_f[0]),
    .tx_valid(r_in_v[0]),  .tx_ready(r_in_r[0]),  .tx_flit(r_in_f[0]),
    .rx_done, .rx_done_buf,
    .c_req, .c_we, .c_buf, .c_addr, .c_wdata, .c_gnt, .c_rdata,
    .c_tx_valid, .c_tx_ready, .c_tx_flit,
    .ab_en, .ab_we, .ab_addr, .ab_wdata, .ab_rdata,
    .wb_en, .wb_we, .wb_addr, .wb_wdata, .wb_rdata);

  // PE array and SIMD
  logic pe_clear, ld_x, ld_w, step, v_valid, v_dvalid;  // v_dvalid: the controller times the SIMD by state
  logic [$clog2(ROWS)-1:0]  ld_x_row, out_r;
  logic [$clog2(COLS)-1:0]  ld_w_col, out_c;
  logic [$clog2(LANES)-1:0] step_kk;
  line_t out_line, v_a, v_b, v_d;
  vop_e  v_op;
  fp32_t v_s;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_pes (
    .clk, .rst_n, .clear(pe_clear),
    .ld_x, .ld_x_row, .ld_x_line(c_rdata),
    .ld_w, .ld_w_col, .ld_w_line(c_rdata),
    .step, .step_kk, .out_r, .out_c, .out_line);

  vec_unit u_simd (
    .clk, .rst_n, .valid(v_valid), .op(v_op), .a(v_a), .b(v_b), .s(v_s),
    .d_valid(v_dvalid), .d(v_d));

  die_ctrl #(.ROWS(ROWS), .COLS(COLS), .PROG_DEPTH(PROG_DEPTH)) u_ctrl (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_instr, .start, .busy, .done,
    .c_req, .c_we, .c_buf, .c_addr, .c_wdata, .c_gnt, .c_rdata,
    .c_tx_valid, .c_tx_ready, .c_tx_flit, .rx_done, .rx_done_buf,
    .pe_clear, .ld_x, .ld_x_row, .ld_w, .ld_w_col, .step, .step_kk, .out_r, .out_c, .out_line,
    .v_valid, .v_op, .v_a, .v_b, .v_s, .v_d);
endmodule
