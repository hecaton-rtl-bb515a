// hecaton_top: the package. A DIES_X x DIES_Y grid of computing dies (4 x 4 as
// drawn in the paper's package figure) joined only to their neighbours by D2D
// links, with IO dies on the west and east edges.
//
// Every adjacent pair of dies is joined by two d2d_link instances, one per
// direction. Longer ring hops (the bypass ring 0 -> 2 -> 3 -> 1 -> 0 of a row or
// column) are not extra wires: they pass through the middle die's router on its
// bypass channel. The IO dies, with their memory controllers, DRAM PHYs and the
// DDR5 DRAM behind them, are not part of this RTL: each row's west and east edge
// link is brought out as a flit port (io_w_* and io_e_*), each through its own
// d2d_link. Flits entering there are remote writes into a die's buffers
// (DRAM -> die scatter); flits a die sends with to_io set leave on the west port
// of their row (die -> DRAM gather). The north and south edges have no IO die:
// their inputs are held idle and their outputs are never routed to.
// Program load: prog_we writes prog_instr at prog_addr of die (prog_x, prog_y).
// start starts all dies; done[y*DIES_X+x] is die (x,y)'s done flag.
// The grid, the adjacent-only links and the IO dies at the edges follow the
// paper; ports, coordinates and the load interface are this design's choices.
module hecaton_top
  import hecaton_pkg::*;
#(
  parameter int unsigned DIES_X     = 4,
  parameter int unsigned DIES_Y     = 4,
  parameter int unsigned BUF_DEPTH  = 65536,
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned LINK_LAT   = 8,
  parameter int unsigned PROG_DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  // west IO dies, one link per die row
  input  logic   io_w_in_valid  [DIES_Y],
  output logic   io_w_in_ready  [DIES_Y],
  input  flit_t  io_w_in_flit   [DIES_Y],
  output logic   io_w_out_valid [DIES_Y],
  input  logic   io_w_out_ready [DIES_Y],
  output flit_t  io_w_out_flit  [DIES_Y],
  // east IO dies
  input  logic   io_e_in_valid  [DIES_Y],
  output logic   io_e_in_ready  [DIES_Y],
  input  flit_t  io_e_in_flit   [DIES_Y],
  output logic   io_e_out_valid [DIES_Y],
  input  logic   io_e_out_ready [DIES_Y],
  output flit_t  io_e_out_flit  [DIES_Y],
  // program load and run
  input  logic   prog_we,
  input  coord_t prog_x,
  input  coord_t prog_y,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  instr_t prog_instr,
  input  logic   start,
  output logic [DIES_X*DIES_Y-1:0] done,
  output logic [DIES_X*DIES_Y-1:0] busy,
  output logic [31:0] byp_count  [DIES_X*DIES_Y],  // per-die router counters
  output logic [31:0] xbar_count [DIES_X*DIES_Y]
);
  localparam int unsigned E = 0, S = 1, W = 2, N = 3;

  // die side ports
  logic  din_v  [DIES_Y][DIES_X][4], din_r  [DIES_Y][DIES_X][4];
  flit_t din_f  [DIES_Y][DIES_X][4];
  logic  dout_v [DIES_Y][DIES_X][4], dout_r [DIES_Y][DIES_X][4];
  flit_t dout_f [DIES_Y][DIES_X][4];
  // far end of the link leaving each die side
  logic  lk_v   [DIES_Y][DIES_X][4], lk_r   [DIES_Y][DIES_X][4];
  flit_t lk_f   [DIES_Y][DIES_X][4];

  for (genvar y = 0; y < DIES_Y; y++) begin : g_y
    for (genvar x = 0; x < DIES_X; x++) begin : g_x
      logic die_we;
      assign die_we = prog_we && (prog_x == coord_t'(x)) && (prog_y == coord_t'(y));

      compute_die #(
        .BUF_DEPTH(BUF_DEPTH), .ROWS(ROWS), .COLS(COLS),
        .FIFO_DEPTH(FIFO_DEPTH), .PROG_DEPTH(PROG_DEPTH)
      ) u_die (
        .clk, .rst_n,
        .my_x(coord_t'(x)), .my_y(coord_t'(y)),
        .d_in_valid(din_v[y][x]), .d_in_ready(din_r[y][x]), .d_in_flit(din_f[y][x]),
        .d_out_valid(dout_v[y][x]), .d_out_ready(dout_r[y][x]), .d_out_flit(dout_f[y][x]),
        .prog_we(die_we), .prog_addr, .prog_instr, .start,
        .busy(busy[y*DIES_X+x]), .done(done[y*DIES_X+x]),
        .byp_count(byp_count[y*DIES_X+x]), .xbar_count(xbar_count[y*DIES_X+x]));

      // outgoing links: E and W always exist (neighbour or IO die), N/S only inside
      for (genvar d = 0; d < 4; d++) begin : g_d
        localparam bit HAS = (d == E) || (d == W) ||
                             (d == S && y < DIES_Y - 1) || (d == N && y > 0);
        if (HAS) begin : g_link
          d2d_link #(.LAT(LINK_LAT)) u_link (
            .clk, .rst_n,
            .in_valid(dout_v[y][x][d]), .in_ready(dout_r[y][x][d]), .in_flit(dout_f[y][x][d]),
            .out_valid(lk_v[y][x][d]), .out_ready(lk_r[y][x][d]), .out_flit(lk_f[y][x][d]));
        end else begin : g_edge
          assign dout_r[y][x][d] = 1'b1;
          assign lk_v[y][x][d]   = 1'b0;
          assign lk_f[y][x][d]   = '0;
        end
      end

      // incoming sides
      // west side: from die (x-1,y) east link, or from the west IO die
      if (x > 0) begin : g_win
        assign din_v[y][x][W]   = lk_v[y][x-1][E];
        assign din_f[y][x][W]   = lk_f[y][x-1][E];
        assign lk_r[y][x-1][E]  = din_r[y][x][W];
      end else begin : g_wio
        d2d_link #(.LAT(LINK_LAT)) u_io_in (
          .clk, .rst_n,
          .in_valid(io_w_in_valid[y]), .in_ready(io_w_in_ready[y]), .in_flit(io_w_in_flit[y]),
          .out_valid(din_v[y][x][W]), .out_ready(din_r[y][x][W]), .out_flit(din_f[y][x][W]));
        assign io_w_out_valid[y] = lk_v[y][x][W];
        assign io_w_out_flit[y]  = lk_f[y][x][W];
        assign lk_r[y][x][W]     = io_w_out_ready[y];
      end
      // east side
      if (x < DIES_X - 1) begin : g_ein
        assign din_v[y][x][E]   = lk_v[y][x+1][W];
        assign din_f[y][x][E]   = lk_f[y][x+1][W];
        assign lk_r[y][x+1][W]  = din_r[y][x][E];
      end else begin : g_eio
        d2d_link #(.LAT(LINK_LAT)) u_io_in (
          .clk, .rst_n,
          .in_valid(io_e_in_valid[y]), .in_ready(io_e_in_ready[y]), .in_flit(io_e_in_flit[y]),
          .out_valid(din_v[y][x][E]), .out_ready(din_r[y][x][E]), .out_flit(din_f[y][x][E]));
        assign io_e_out_valid[y] = lk_v[y][x][E];
        assign io_e_out_flit[y]  = lk_f[y][x][E];
        assign lk_r[y][x][E]     = io_e_out_ready[y];
      end
      // north side
      if (y > 0) begin : g_nin
        assign din_v[y][x][N]   = lk_v[y-1][x][S];
        assign din_f[y][x][N]   = lk_f[y-1][x][S];
        assign lk_r[y-1][x][S]  = din_r[y][x][N];
      end else begin : g_nedge
        assign din_v[y][x][N] = 1'b0;
        assign din_f[y][x][N] = '0;
      end
      // south side
      if (y < DIES_Y - 1) begin : g_sin
        assign din_v[y][x][S]   = lk_v[y+1][x][N];
        assign din_f[y][x][S]   = lk_f[y+1][x][N];
        assign lk_r[y+1][x][N]  = din_r[y][x][S];
      end else begin : g_sedge
        assign din_v[y][x][S] = 1'b0;
        assign din_f[y][x][S] = '0;
      end
      if (y == 0)          begin : g_nr assign lk_r[y][x][N] = 1'b1; end
      if (y == DIES_Y - 1) begin : g_sr assign lk_r[y][x][S] = 1'b1; end
    end
  end
endmodule
