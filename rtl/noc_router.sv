// noc_router: the on-die network of a computing die. It joins the two global
// buffers, the controller's datapath and the local port of the NoP router.
//
// Receive side: each flit arriving from the NoP is a remote write of one line
// into the weight or activation buffer. A plain flit is written in one cycle;
// a flit with accum set is read-modify-written over two cycles, adding the
// payload lane by lane (FP32) to the stored line. This is how partial sums are
// reduced during reduce-scatter. Every completed flit pulses rx_done, with
// rx_done_buf naming the buffer it went to. Flits from
// the NoP have priority on the buffers, so the network always drains; the
// controller's buffer requests get c_gnt only in cycles the receive side leaves
// the buffers free. Reads return one cycle after the grant on c_rdata.
// Transmit side: the controller's flits go to the NoP local input through a
// two-entry FIFO.
// The paper says the NoC serves the PEs and acts as the local interface of the
// NoP router; the remote-write packet format, the accumulate-on-receive and the
// fixed priority are this design's choices.
module noc_router
  import hecaton_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // NoP local port
  input  logic     rx_valid,
  output logic     rx_ready,
  input  flit_t    rx_flit,
  output logic     tx_valid,
  input  logic     tx_ready,
  output flit_t    tx_flit,
  output logic     rx_done,
  output buf_sel_e rx_done_buf,   // buffer the completed flit was written to
  // controller
  input  logic     c_req,
  input  logic     c_we,
  input  buf_sel_e c_buf,
  input  addr_t    c_addr,
  input  line_t    c_wdata,
  output logic     c_gnt,
  output line_t    c_rdata,
  input  logic     c_tx_valid,
  output logic     c_tx_ready,
  input  flit_t    c_tx_flit,
  // buffers
  output logic     ab_en,
  output logic     ab_we,
  output addr_t    ab_addr,
  output line_t    ab_wdata,
  input  line_t    ab_rdata,
  output logic     wb_en,
  output logic     wb_we,
  output addr_t    wb_addr,
  output line_t    wb_wdata,
  input  line_t    wb_rdata
);
  typedef enum logic {RX_IDLE, RX_ACC} rx_state_e;
  rx_state_e st;
  buf_sel_e  rd_buf_q;
  line_t     rd_line, sum_line;

  logic      b_en, b_we;
  buf_sel_e  b_sel;
  addr_t     b_addr;
  line_t     b_wdata;

  assign rd_line = (rd_buf_q == BUF_WEI) ? wb_rdata : ab_rdata;
  assign c_rdata = rd_line;
  assign rx_done_buf = rx_flit.buf_sel;

  for (genvar l = 0; l < LANES; l++) begin : g_acc
    fp32_add u_add (.a(rd_line[l*FP_W +: FP_W]), .b(rx_flit.data[l*FP_W +: FP_W]),
                    .y(sum_line[l*FP_W +: FP_W]));
  end

  always_comb begin
    rx_ready = 1'b0;
    rx_done  = 1'b0;
    c_gnt    = 1'b0;
    b_en     = 1'b0;
    b_we     = 1'b0;
    b_sel    = BUF_ACT;
    b_addr   = '0;
    b_wdata  = rx_flit.data;
    if (st == RX_ACC) begin
      b_en     = 1'b1;
      b_we     = 1'b1;
      b_sel    = rx_flit.buf_sel;
      b_addr   = rx_flit.addr;
      b_wdata  = sum_line;
      rx_ready = 1'b1;
      rx_done  = 1'b1;
    end else if (rx_valid) begin
      b_en   = 1'b1;
      b_we   = !rx_flit.accum;
      b_sel  = rx_flit.buf_sel;
      b_addr = rx_flit.addr;
      if (!rx_flit.accum) begin
        rx_ready = 1'b1;
        rx_done  = 1'b1;
      end
    end else if (c_req) begin
      c_gnt   = 1'b1;
      b_en    = 1'b1;
      b_we    = c_we;
      b_sel   = c_buf;
      b_addr  = c_addr;
      b_wdata = c_wdata;
    end
  end

  assign ab_en    = b_en && (b_sel == BUF_ACT);
  assign wb_en    = b_en && (b_sel == BUF_WEI);
  assign ab_we    = b_we;
  assign wb_we    = b_we;
  assign ab_addr  = b_addr;
  assign wb_addr  = b_addr;
  assign ab_wdata = b_wdata;
  assign wb_wdata = b_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= RX_IDLE;
      rd_buf_q <= BUF_ACT;
    end else begin
      if (b_en && !b_we) rd_buf_q <= b_sel;
      if (st == RX_ACC)                                st <= RX_IDLE;
      else if (rx_valid && rx_flit.accum)              st <= RX_ACC;
    end
  end

  sync_fifo #(.T(flit_t), .DEPTH(2)) u_txq (
    .clk, .rst_n,
    .in_valid (c_tx_valid), .in_ready (c_tx_ready), .in_data (c_tx_flit),
    .out_valid(tx_valid),   .out_ready(tx_ready),   .out_data(tx_flit));
endmodule
