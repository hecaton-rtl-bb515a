// nop_router: the network-on-package router of a computing die, with the
// bypass channel that lets a die forward ring traffic while it sends its own.
//
// Five ends: local, E, S, W, N (port_e). Flits are single-flit packets routed
// dimension-ordered, X first then Y; flits marked to_io always go west, to the
// IO die on the package edge. On each directional input a demultiplexer steers
// a flit into one of two FIFOs: the bypass FIFO if it only passes through in a
// straight line (in on W, out on E and so on; the paper notes that forwarding
// on a ring always leaves by the port opposite the one it came in on), the
// regular FIFO otherwise. Regular FIFOs (and the local input FIFO) reach the
// outputs through a 5x5 crossbar with one round-robin allocator per output. Each
// directional output has a 2:1 multiplexer between the crossbar and the bypass
// FIFO of the opposite input; when both have a flit the multiplexer alternates.
// So a die can forward W->E and at the same time move its own flit local->W,
// both at one flit per cycle.
// From the paper (Fig. 5(d) and its text): the five ends, input FIFOs, the
// crossbar, arbiters/allocators, the two FIFOs per input and the output
// multiplexers of the bypass. This design's choices: XY routing, single-flit
// packets, FIFO_DEPTH = 4 (the figure draws four-slot FIFOs), round-robin
// arbitration and the alternating bypass/crossbar priority.
// Interface: valid/ready per port, out_valid/out_flit are combinational from
// the FIFO heads; a flit accepted in cycle t can leave in cycle t+1.
module nop_router
  import hecaton_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  coord_t my_x,
  input  coord_t my_y,
  input  logic   in_valid  [NPORTS],
  output logic   in_ready  [NPORTS],
  input  flit_t  in_flit   [NPORTS],
  output logic   out_valid [NPORTS],
  input  logic   out_ready [NPORTS],
  output flit_t  out_flit  [NPORTS],
  output logic [31:0] byp_count,   // flits that took the bypass channel
  output logic [31:0] xbar_count   // flits that crossed the crossbar
);
  function automatic logic [2:0] route(input flit_t f, input coord_t x, input coord_t y);
    if (f.to_io)          return 3'(P_W);
    else if (f.dst_x > x) return 3'(P_E);
    else if (f.dst_x < x) return 3'(P_W);
    else if (f.dst_y > y) return 3'(P_S);
    else if (f.dst_y < y) return 3'(P_N);
    else                  return 3'(P_LOCAL);
  endfunction

  function automatic logic [2:0] opposite(input int unsigned p);
    case (p)
      1: return 3'(P_W);
      2: return 3'(P_N);
      3: return 3'(P_E);
      4: return 3'(P_S);
      default: return 3'(P_LOCAL);
    endcase
  endfunction

  // Input stage: demux into regular / bypass FIFO
  logic  rq_in_v [NPORTS], rq_in_r [NPORTS];
  logic  bq_in_v [NPORTS], bq_in_r [NPORTS];
  logic  rq_v [NPORTS], rq_pop [NPORTS];
  logic  bq_v [NPORTS], bq_pop [NPORTS];
  flit_t rq_h [NPORTS], bq_h [NPORTS];
  logic [2:0] rq_route [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    logic is_byp;
    if (i == 0) begin : g_local
      assign is_byp = 1'b0;
      assign bq_v[i] = 1'b0;
      assign bq_h[i] = '0;
      assign bq_in_r[i] = 1'b0;
    end else begin : g_dir
      assign is_byp = (route(in_flit[i], my_x, my_y) == opposite(i));
      sync_fifo #(.T(flit_t), .DEPTH(FIFO_DEPTH)) u_bq (
        .clk, .rst_n,
        .in_valid (bq_in_v[i]), .in_ready (bq_in_r[i]), .in_data (in_flit[i]),
        .out_valid(bq_v[i]),    .out_ready(bq_pop[i]),  .out_data(bq_h[i]));
    end
    assign rq_in_v[i] = in_valid[i] && !is_byp;
    assign bq_in_v[i] = in_valid[i] &&  is_byp;
    assign in_ready[i] = is_byp ? bq_in_r[i] : rq_in_r[i];

    sync_fifo #(.T(flit_t), .DEPTH(FIFO_DEPTH)) u_rq (
      .clk, .rst_n,
      .in_valid (rq_in_v[i]), .in_ready (rq_in_r[i]), .in_data (in_flit[i]),
      .out_valid(rq_v[i]),    .out_ready(rq_pop[i]),  .out_data(rq_h[i]));
    assign rq_route[i] = route(rq_h[i], my_x, my_y);
  end

  // Crossbar allocation and output multiplexers
  logic [NPORTS-1:0] req  [NPORTS];
  logic [NPORTS-1:0] gnt  [NPORTS];
  logic              xb_v [NPORTS], sel_byp [NPORTS], xb_take [NPORTS], pri_byp [NPORTS];
  flit_t             xb_f [NPORTS];

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    localparam int unsigned OPP = (o == 1) ? 3 : (o == 2) ? 4 : (o == 3) ? 1 : (o == 4) ? 2 : 0;
    always_comb begin
      for (int i = 0; i < NPORTS; i++) req[o][i] = rq_v[i] && (rq_route[i] == 3'(o));
    end
    rr_arbiter #(.N(NPORTS)) u_alloc (
      .clk, .rst_n, .req(req[o]), .advance(xb_take[o]), .gnt(gnt[o]));
    always_comb begin
      xb_f[o] = '0;
      for (int i = 0; i < NPORTS; i++) if (gnt[o][i]) xb_f[o] = rq_h[i];
    end
    assign xb_v[o] = |req[o];
    if (o == 0) begin : g_loc
      assign sel_byp[o] = 1'b0;
      assign out_valid[o] = xb_v[o];
      assign out_flit[o]  = xb_f[o];
      assign pri_byp[o]   = 1'b0;
    end else begin : g_dir
      logic pri;
      assign pri_byp[o]   = pri;
      assign sel_byp[o]   = bq_v[OPP] && (!xb_v[o] || pri);
      assign out_valid[o] = xb_v[o] || bq_v[OPP];
      assign out_flit[o]  = sel_byp[o] ? bq_h[OPP] : xb_f[o];
      assign bq_pop[OPP]  = sel_byp[o] && out_ready[o];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) pri <= 1'b0;
        else if (out_ready[o] && xb_v[o] && bq_v[OPP]) pri <= !pri;
      end
    end
    assign xb_take[o] = xb_v[o] && !sel_byp[o] && out_ready[o];
  end
  assign bq_pop[0] = 1'b0;

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      rq_pop[i] = 1'b0;
      for (int o = 0; o < NPORTS; o++) if (gnt[o][i] && xb_take[o]) rq_pop[i] = 1'b1;
    end
  end

  // Performance counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      byp_count  <= '0;
      xbar_count <= '0;
    end else begin
      int unsigned nb, nx;
      nb = 0; nx = 0;
      for (int o = 0; o < NPORTS; o++) begin
        if (sel_byp[o] && out_ready[o]) nb++;
        if (xb_take[o]) nx++;
      end
      byp_count  <= byp_count + nb;
      xbar_count <= xbar_count + nx;
    end
  end
endmodule
