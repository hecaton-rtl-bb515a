// die_ctrl: the controller (CTRL) of a computing die. It runs a small program
// that expresses one die's share of a training step: the steps of Algorithm 1
// become SEND (scatter/gather/all-gather/reduce-scatter transfers, one line per
// flit), WAIT (until a number of lines has arrived), MATMUL (on the PE array)
// and VEC (on the SIMD unit) instructions.
//
// The program memory (PROG_DEPTH instr_t words) is written through prog_we /
// prog_addr / prog_instr while the die is idle; a start pulse runs it from
// address 0 until OP_HALT, which raises done. The buffers are reached through
// the NoC (c_req/c_gnt, read data one cycle after the grant), so a controller
// access waits whenever the NoP receive side is using the buffers.
// MATMUL computes Y[ROWS][COLS*LANES] = X[ROWS][K] * W[K][COLS*LANES], K = cnt:
// X row r, elements k..k+LANES-1, is the line a_addr + r*stride + k/LANES;
// W row k, output channels c*LANES.., is the line b_addr + k*COLS + c;
// Y(r, c) is written to the line d_addr + r*COLS + c. Per k it loads COLS weight
// lines (plus ROWS activation lines every LANES k) and then fires one step.
// WAIT counts lines the NoP has written into buffer a_buf (one counter per
// buffer) and consumes cnt of them, so traffic into one buffer cannot satisfy
// a wait on the other. The paper names the controller and gives the dataflow it orchestrates;
// the instruction set, its encoding and the loop order are this design's own.
module die_ctrl
  import hecaton_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned PROG_DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  instr_t   prog_instr,
  input  logic     start,
  output logic     busy,
  output logic     done,
  // NoC
  output logic     c_req,
  output logic     c_we,
  output buf_sel_e c_buf,
  output addr_t    c_addr,
  output line_t    c_wdata,
  input  logic     c_gnt,
  input  line_t    c_rdata,
  output logic     c_tx_valid,
  input  logic     c_tx_ready,
  output flit_t    c_tx_flit,
  input  logic     rx_done,
  input  buf_sel_e rx_done_buf,
  // PE array
  output logic     pe_clear,
  output logic     ld_x,
  output logic [$clog2(ROWS)-1:0] ld_x_row,
  output logic     ld_w,
  output logic [$clog2(COLS)-1:0] ld_w_col,
  output logic     step,
  output logic [$clog2(LANES)-1:0] step_kk,
  output logic [$clog2(ROWS)-1:0] out_r,
  output logic [$clog2(COLS)-1:0] out_c,
  input  line_t    out_line,
  // SIMD
  output logic     v_valid,
  output vop_e     v_op,
  output line_t    v_a,
  output line_t    v_b,
  output fp32_t    v_s,
  input  line_t    v_d
);
  localparam int unsigned PW = $clog2(PROG_DEPTH);
  localparam int unsigned LW = $clog2(LANES);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_DEC, S_SND_RD, S_SND_CAP, S_SND_TX, S_WAIT,
    S_MM_XRD, S_MM_XCAP, S_MM_WRD, S_MM_WCAP, S_MM_STEP, S_MM_OUT,
    S_V_RA, S_V_CA, S_V_RB, S_V_CB, S_V_WR, S_NEXT
  } state_e;

  state_e            st;
  instr_t            prog [PROG_DEPTH];
  instr_t            ir;
  logic [PW-1:0]     pc;
  logic [CNT_W-1:0]  i, k;
  logic [7:0]        r, c;
  logic [31:0]       rx_avail [2];
  line_t             hold;
  logic              consume;

  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_addr] <= prog_instr;
  end

  // Datapath outputs, decoded from the state
  always_comb begin
    c_req      = 1'b0;
    c_we       = 1'b0;
    c_buf      = BUF_ACT;
    c_addr     = '0;
    c_wdata    = out_line;
    c_tx_valid = 1'b0;
    c_tx_flit  = '{dst_x: ir.dst_x, dst_y: ir.dst_y, to_io: ir.to_io, buf_sel: ir.d_buf,
                   accum: ir.accum, addr: ir.d_addr + addr_t'(i), data: hold};
    pe_clear   = 1'b0;
    ld_x       = 1'b0;
    ld_w       = 1'b0;
    step       = 1'b0;
    v_valid    = 1'b0;
    unique case (st)
      S_SND_RD: begin
        c_req = 1'b1; c_buf = ir.a_buf; c_addr = ir.a_addr + addr_t'(i);
      end
      S_SND_TX: c_tx_valid = 1'b1;
      S_DEC:    pe_clear = (ir.op == OP_MATMUL);
      S_MM_XRD: begin
        c_req = 1'b1; c_buf = ir.a_buf;
        c_addr = ir.a_addr + addr_t'(r * ir.stride) + addr_t'(k >> LW);
      end
      S_MM_XCAP: ld_x = 1'b1;
      S_MM_WRD: begin
        c_req = 1'b1; c_buf = ir.b_buf;
        c_addr = ir.b_addr + addr_t'(k * COLS) + addr_t'(c);
      end
      S_MM_WCAP: ld_w = 1'b1;
      S_MM_STEP: step = 1'b1;
      S_MM_OUT: begin
        c_req = 1'b1; c_we = 1'b1; c_buf = ir.d_buf;
        c_addr = ir.d_addr + addr_t'(r * COLS) + addr_t'(c);
        c_wdata = out_line;
      end
      S_V_RA: begin
        c_req = 1'b1; c_buf = ir.a_buf; c_addr = ir.a_addr + addr_t'(i);
      end
      S_V_RB: begin
        c_req = 1'b1; c_buf = ir.b_buf; c_addr = ir.b_addr + addr_t'(i);
      end
      S_V_CB: v_valid = 1'b1;
      S_V_WR: begin
        c_req = 1'b1; c_we = 1'b1; c_buf = ir.d_buf; c_addr = ir.d_addr + addr_t'(i);
        c_wdata = v_d;
      end
      default: ;
    endcase
  end

  assign ld_x_row = r[$clog2(ROWS)-1:0];
  assign ld_w_col = c[$clog2(COLS)-1:0];
  assign step_kk  = k[LW-1:0];
  assign out_r    = r[$clog2(ROWS)-1:0];
  assign out_c    = c[$clog2(COLS)-1:0];
  assign v_op     = ir.vop;
  assign v_a      = hold;
  assign v_b      = c_rdata;
  assign v_s      = ir.scalar;
  assign busy     = (st != S_IDLE);
  assign consume  = (st == S_WAIT) && (rx_avail[ir.a_buf] >= 32'(ir.cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_avail[0] <= '0;
      rx_avail[1] <= '0;
    end else begin
      for (int b = 0; b < 2; b++)
        rx_avail[b] <= rx_avail[b] + 32'(rx_done && (rx_done_buf == buf_sel_e'(b)))
                       - ((consume && ir.a_buf == buf_sel_e'(b)) ? 32'(ir.cnt) : 32'd0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      pc   <= '0;
      ir   <= '0;
      i    <= '0;
      k    <= '0;
      r    <= '0;
      c    <= '0;
      hold <= '0;
      done <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          pc   <= '0;
          done <= 1'b0;
          st   <= S_FETCH;
        end
        S_FETCH: begin
          ir <= prog[pc];
          st <= S_DEC;
        end
        S_DEC: begin
          i <= '0; k <= '0; r <= '0; c <= '0;
          unique case (ir.op)
            OP_HALT:   begin done <= 1'b1; st <= S_IDLE; end
            OP_SEND:   st <= (ir.cnt == '0) ? S_NEXT : S_SND_RD;
            OP_WAIT:   st <= S_WAIT;
            OP_MATMUL: st <= (ir.cnt == '0) ? S_NEXT : S_MM_XRD;
            OP_VEC:    st <= (ir.cnt == '0) ? S_NEXT : S_V_RA;
            default:   st <= S_NEXT;
          endcase
        end
        S_SND_RD:  if (c_gnt) st <= S_SND_CAP;
        S_SND_CAP: begin hold <= c_rdata; st <= S_SND_TX; end
        S_SND_TX:  if (c_tx_ready) begin
          if (i + 1'b1 == ir.cnt) st <= S_NEXT;
          else begin i <= i + 1'b1; st <= S_SND_RD; end
        end
        S_WAIT:    if (consume) st <= S_NEXT;
        S_MM_XRD:  if (c_gnt) st <= S_MM_XCAP;
        S_MM_XCAP: begin
          if (r == 8'(ROWS - 1)) begin r <= '0; st <= S_MM_WRD; end
          else begin r <= r + 1'b1; st <= S_MM_XRD; end
        end
        S_MM_WRD:  if (c_gnt) st <= S_MM_WCAP;
        S_MM_WCAP: begin
          if (c == 8'(COLS - 1)) begin c <= '0; st <= S_MM_STEP; end
          else begin c <= c + 1'b1; st <= S_MM_WRD; end
        end
        S_MM_STEP: begin
          k <= k + 1'b1;
          if (k + 1'b1 == ir.cnt)              begin r <= '0; c <= '0; st <= S_MM_OUT; end
          else if (((k + 1'b1) & CNT_W'(LANES - 1)) == '0) st <= S_MM_XRD;
          else                                 st <= S_MM_WRD;
        end
        S_MM_OUT:  if (c_gnt) begin
          if (c == 8'(COLS - 1)) begin
            c <= '0;
            if (r == 8'(ROWS - 1)) st <= S_NEXT;
            else r <= r + 1'b1;
          end else c <= c + 1'b1;
        end
        S_V_RA:    if (c_gnt) st <= S_V_CA;
        S_V_CA:    begin hold <= c_rdata; st <= S_V_RB; end
        S_V_RB:    if (c_gnt) st <= S_V_CB;
        S_V_CB:    st <= S_V_WR;
        S_V_WR:    if (c_gnt) begin
          if (i + 1'b1 == ir.cnt) st <= S_NEXT;
          else begin i <= i + 1'b1; st <= S_V_RA; end
        end
        S_NEXT: begin
          pc <= pc + 1'b1;
          st <= S_FETCH;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
