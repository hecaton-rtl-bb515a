// global_buffer: one half of a computing die's global buffer (the die has one
// for weights, "Wei.", and one for activations, "Act.").
//
// 8 MB per buffer is the paper's number: DEPTH = 65536 lines of LINE_W = 1024
// bits. It is written as a single-port synchronous memory array, standing in
// for the SRAM macros a real die would compile; the single port and the one-
// cycle read latency are this design's choice. When en is high: we=1 writes
// wdata to addr; we=0 reads addr and rdata shows that line in the next cycle
// (rdata holds otherwise). The low $clog2(DEPTH) address bits are used.
module global_buffer
  import hecaton_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned WIDTH = LINE_W
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  addr_t            addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    a;

  assign a = addr[AW-1:0];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[a] <= wdata;
      else    rdata  <= mem[a];
    end
  end
endmodule
