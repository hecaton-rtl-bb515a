// vec_unit: the SIMD vector unit of the computing die.
//
// LANES parallel FP32 lanes apply one vop_e operation to two lines a, b and a
// scalar s: add (residual links), subtract, multiply, a + s*b (the weight
// update W - lr*dW of Step 8 with s = -lr), scale, ReLU and max. The result is
// registered: an operation issued with valid in cycle t appears on d with
// d_valid in cycle t+1, and d holds until the next issue. One line per cycle.
// The paper only names the SIMD/vector unit; the operation set is this design's
// choice, picked for what the training dataflow of Algorithm 1 needs.
// Softmax, GeLU and LayerNorm are not provided.
module vec_unit
  import hecaton_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid,
  input  vop_e  op,
  input  line_t a,
  input  line_t b,
  input  fp32_t s,
  output logic  d_valid,
  output line_t d
);
  line_t res;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp32_t la, lb, ma, mb, p, ay, sum, r;
    assign la = a[l*FP_W +: FP_W];
    assign lb = b[l*FP_W +: FP_W];
    assign ma = (op == V_MUL) ? la : s;
    assign mb = (op == V_SCAL) ? la : lb;
    fp32_mul u_mul (.a(ma), .b(mb), .y(p));
    assign ay = (op == V_ADD) ? lb :
                (op == V_SUB) ? {~lb[31], lb[30:0]} : p;
    fp32_add u_add (.a(la), .b(ay), .y(sum));
    always_comb begin
      unique case (op)
        V_ADD, V_SUB, V_AXPY: r = sum;
        V_MUL, V_SCAL:        r = p;
        V_RELU:               r = la[31] ? 32'd0 : la;
        V_MAX: begin
          // ordered compare of sign-magnitude values
          if (la[31] != lb[31]) r = la[31] ? lb : la;
          else if (la[31])      r = (la[30:0] > lb[30:0]) ? lb : la;
          else                  r = (la[30:0] > lb[30:0]) ? la : lb;
        end
        default:              r = la;
      endcase
    end
    assign res[l*FP_W +: FP_W] = r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      d       <= '0;
    end else begin
      d_valid <= valid;
      if (valid) d <= res;
    end
  end
endmodule
