// rr_arbiter: round-robin arbiter ("Arbiter" of the NoP router, Fig. 5(d)).
//
// N request lines, one-hot grant, combinational. The search starts one place
// after the last requester that was served; the pointer advances only when the
// grant is accepted (advance high), so a blocked winner keeps its grant. The
// round-robin policy is this design's choice; the paper names the arbiter only.
module rr_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] last;

  always_comb begin
    int unsigned idx;
    gnt = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      idx = (int'(last) + k) % N;
      if (req[idx] && gnt == '0) gnt[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= PW'(N-1);
    else if (advance && gnt != '0) begin
      for (int unsigned i = 0; i < N; i++)
        if (gnt[i]) last <= PW'(i);
    end
  end
endmodule
