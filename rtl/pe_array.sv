// pe_array: the ROWS x COLS grid of PEs of one computing die (4 x 4 in the
// evaluated die, 32 lanes per PE).
//
// Operand registers: one activation line per PE row (xline, LANES consecutive
// elements of one row of X along k) and one weight line per PE column (wline,
// LANES output channels of one row of W). A step with lane index kk sends
// xline[r][kk] to every PE of row r and wline[c] to every PE of column c, so
// PE (r,c) accumulates Y[r][c*LANES + l] += X[r][k] * W[k][c*LANES + l].
// After K steps the ROWS x COLS*LANES output block is read one line at a time
// through out_r/out_c (combinational mux). Loads and steps take one cycle each;
// a step's result is on out_line one cycle later. The grid size is the paper's;
// this operand broadcast scheme is this design's choice.
module pe_array
  import hecaton_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      ld_x,
  input  logic [$clog2(ROWS)-1:0]   ld_x_row,
  input  line_t                     ld_x_line,
  input  logic                      ld_w,
  input  logic [$clog2(COLS)-1:0]   ld_w_col,
  input  line_t                     ld_w_line,
  input  logic                      step,
  input  logic [$clog2(LANES)-1:0]  step_kk,
  input  logic [$clog2(ROWS)-1:0]   out_r,
  input  logic [$clog2(COLS)-1:0]   out_c,
  output line_t                     out_line
);
  line_t xline [ROWS];
  line_t wline [COLS];
  line_t acc   [ROWS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) xline[r] <= '0;
      for (int c = 0; c < COLS; c++) wline[c] <= '0;
    end else begin
      if (ld_x) xline[ld_x_row] <= ld_x_line;
      if (ld_w) wline[ld_w_col] <= ld_w_line;
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    fp32_t xr;
    assign xr = xline[r][step_kk*FP_W +: FP_W];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.NLANES(LANES)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clear (clear),
        .step  (step),
        .x     (xr),
        .w     (wline[c]),
        .acc   (acc[r][c])
      );
    end
  end

  assign out_line = acc[out_r][out_c];
endmodule
