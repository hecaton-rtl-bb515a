// sync_fifo: synchronous FIFO with valid/ready on both sides, used for the
// router input buffers and the receive side of each D2D link.
//
// DEPTH entries of type T held in a register array with read/write pointers and
// a count. in_ready = not full, out_valid = not empty, out_data is the head
// (combinational from the array). A push and a pop may happen in the same cycle.
// The head is visible one cycle after it is pushed (no fall-through).
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                 mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [PW:0]      cnt;
  logic             push, pop;

  assign in_ready  = (cnt != (PW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  // A valid must be held until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (in_valid && !in_ready) |=> in_valid;
  endproperty
  a_hold: assert property (p_hold);
endmodule
