// d2d_link: one direction of a die-to-die connection (the D2D interface of a
// computing die, its PHY lane and the bridge or substrate trace to the next die).
//
// The channel is modelled as a LAT-stage pipeline with credit-based flow
// control: the sender holds CREDITS credits, one per slot of the receive FIFO
// on the far side; a flit costs one credit, and each flit the receiver drains
// sends a credit back through a LAT-stage return pipeline. With CREDITS >=
// 2*LAT+1 the link carries one flit per cycle. LAT = 8 cycles is the paper's
// link latency alpha = 10 ns at its 800 MHz clock; the credit scheme and the
// receive FIFO are this design's choice. The analog PHY itself is not modelled:
// the pipeline stands in for it. Timing: a flit accepted in cycle t is at the
// receive FIFO head in cycle t+LAT+1. in_ready is a register (credit count
// not zero), so it does not depend combinationally on in_valid.
module d2d_link
  import hecaton_pkg::*;
#(
  parameter int unsigned LAT     = 8,
  parameter int unsigned CREDITS = 2 * LAT + 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);
  localparam int unsigned CW = $clog2(CREDITS + 1);

  logic [CW-1:0] credits;
  logic          send, rx_pop, rx_in_ready;
  logic          pv [LAT];
  flit_t         pf [LAT];
  logic          cr [LAT];

  assign in_ready = (credits != '0);
  assign send     = in_valid && in_ready;
  assign rx_pop   = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credits <= CW'(CREDITS);
      for (int i = 0; i < LAT; i++) begin
        pv[i] <= 1'b0;
        cr[i] <= 1'b0;
      end
    end else begin
      credits <= credits - CW'(send) + CW'(cr[LAT-1]);
      pv[0] <= send;
      cr[0] <= rx_pop;
      for (int i = 1; i < LAT; i++) begin
        pv[i] <= pv[i-1];
        cr[i] <= cr[i-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    pf[0] <= in_flit;
    for (int i = 1; i < LAT; i++) pf[i] <= pf[i-1];
  end

  sync_fifo #(.T(flit_t), .DEPTH(CREDITS)) u_rx (
    .clk, .rst_n,
    .in_valid (pv[LAT-1]), .in_ready (rx_in_ready), .in_data (pf[LAT-1]),
    .out_valid(out_valid), .out_ready(out_ready),   .out_data(out_flit));

  // Credits guarantee the receive FIFO never overflows.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  pv[LAT-1] |-> rx_in_ready);
  a_credit_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   credits <= CW'(CREDITS));
endmodule
