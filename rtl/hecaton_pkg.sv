// hecaton_pkg: types and constants shared by the computing die, the NoP routers
// and the package top.
//
// A "line" is the unit every datapath moves: LANES single-precision words, the
// width of one PE's MAC vector. Buffers are LINE_W wide, every NoP flit carries
// one line, and the SIMD unit works on one line per operation. LANES = 32 follows
// the 32 lanes per PE of the evaluated die; the flit header layout, the
// instruction encoding and the coordinate width are this design's own choices.
package hecaton_pkg;

  localparam int unsigned LANES   = 32;            // MAC lanes per PE
  localparam int unsigned FP_W    = 32;            // IEEE-754 single precision
  localparam int unsigned LINE_W  = LANES * FP_W;  // 1024-bit line
  localparam int unsigned ADDR_W  = 16;            // line address in one 8 MB buffer
  localparam int unsigned COORD_W = 5;             // die coordinate, up to 32 x 32 dies
  localparam int unsigned CNT_W   = 16;

  typedef logic [FP_W-1:0]    fp32_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [COORD_W-1:0] coord_t;

  // Buffer select inside a die
  typedef enum logic {BUF_ACT = 1'b0, BUF_WEI = 1'b1} buf_sel_e;

  // Router port numbering (Fig. 5(d): local, E, S, W, N)
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0, P_E = 3'd1, P_S = 3'd2, P_W = 3'd3, P_N = 3'd4
  } port_e;
  localparam int unsigned NPORTS = 5;

  // One single-flit NoP packet: a remote write (or accumulate) of one line.
  // x grows to the east, y grows to the south. to_io sends the flit west to the
  // IO die on the package edge instead of to a computing die.
  typedef struct packed {
    coord_t   dst_x;
    coord_t   dst_y;
    logic     to_io;
    buf_sel_e buf_sel;
    logic     accum;    // 1: add payload into the addressed line (reduce-scatter)
    addr_t    addr;
    line_t    data;
  } flit_t;

  // SIMD operations (line-wise, lane by lane)
  typedef enum logic [2:0] {
    V_ADD  = 3'd0,   // d = a + b
    V_SUB  = 3'd1,   // d = a - b
    V_MUL  = 3'd2,   // d = a * b
    V_AXPY = 3'd3,   // d = a + s*b   (weight update W - lr*dW with s = -lr)
    V_SCAL = 3'd4,   // d = s*a
    V_RELU = 3'd5,   // d = max(a, 0)
    V_MAX  = 3'd6    // d = max(a, b)
  } vop_e;

  // Controller instructions
  typedef enum logic [2:0] {
    OP_HALT   = 3'd0,
    OP_SEND   = 3'd1,  // send cnt lines from buffer a to (dst_x,dst_y) buffer d
    OP_WAIT   = 3'd2,  // wait until cnt lines have been received from the NoP
    OP_MATMUL = 3'd3,  // Y[ROWS x COLS*LANES] = X[ROWS x cnt] * W[cnt x COLS*LANES]
    OP_VEC    = 3'd4   // d[i] = vop(a[i], b[i], scalar) for cnt lines
  } opcode_e;

  typedef struct packed {
    opcode_e           op;
    vop_e              vop;
    logic [CNT_W-1:0]  cnt;
    buf_sel_e          a_buf;
    addr_t             a_addr;
    buf_sel_e          b_buf;
    addr_t             b_addr;
    buf_sel_e          d_buf;
    addr_t             d_addr;
    logic [CNT_W-1:0]  stride;  // MATMUL: lines per X row
    coord_t            dst_x;
    coord_t            dst_y;
    logic              to_io;
    logic              accum;
    fp32_t             scalar;
  } instr_t;

endpackage
