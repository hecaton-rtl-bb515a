// pe: one processing element (a "C" in the PE core grid of the computing die).
//
// LANES FP32 MAC lanes share one activation scalar x and take one weight each
// from the weight line w, so a step computes acc[l] += x * w[l] for all lanes:
// one rank-1 update of a 1 x LANES output strip. 32 lanes per PE is the paper's
// number; broadcasting one activation to all lanes (output-stationary) is this
// design's choice, the paper leaves the PE dataflow to Simba-like arrays.
// Timing: a step in cycle t is visible on acc in cycle t+1; clear zeroes acc.
module pe
  import hecaton_pkg::*;
#(
  parameter int unsigned NLANES = LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    step,
  input  fp32_t                   x,
  input  logic [NLANES*FP_W-1:0]  w,
  output logic [NLANES*FP_W-1:0]  acc
);
  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    fp32_mac u_mac (
      .clk   (clk),
      .rst_n (rst_n),
      .clear (clear),
      .en    (step),
      .a     (x),
      .b     (w[l*FP_W +: FP_W]),
      .acc   (acc[l*FP_W +: FP_W])
    );
  end
endmodule
