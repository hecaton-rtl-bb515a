// fp32_mac: one FP32 multiply-accumulate lane, acc <= acc + a*b.
//
// The paper builds its PE from Simba-style vector MACs with the INT8 multipliers
// replaced by FP32 ones; this lane is that FP32 MAC. The product and the sum are
// each rounded (fp32_mul then fp32_add, not a fused multiply-add; an unfused
// MAC is this design's choice). One MAC per cycle when en is high; clear resets
// the accumulator to +0 and has priority over en. acc is a register, so a
// product issued in cycle t is visible in acc in cycle t+1.
module fp32_mac
  import hecaton_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  en,
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t acc
);
  fp32_t prod, sum;

  fp32_mul u_mul (.a(a),   .b(b),    .y(prod));
  fp32_add u_add (.a(acc), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= '0;
    else if (en)    acc <= sum;
  end
endmodule
