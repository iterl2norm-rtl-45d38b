// iterl2norm_pkg: constants and types shared by the IterL2Norm macro.
//
// The macro keeps a d-long vector (d <= 1024) in NB=8 banks of HB=16 rows of
// WB=8 elements, so one "chunk" of NB*WB = 64 elements is read per cycle.
// The bank geometry follows the paper; the enum encodings, the select codes
// of the shared datapath and the default number format (FP32) are this
// design's choices.  Geometry (NB, HB, WB) and element widths (EXP_W,
// MAN_W; FP32 by default, FP16 is (5,10), BFloat16 (8,7)) are parameters of
// each module.
// DP_REQ_IDLE is used by the phase controllers and the top; modules that
// import nothing from the package leave it unused.
package iterl2norm_pkg;

  // Add block modes (Fig. 1c: accumulate and mean-shift modes).
  typedef enum logic {
    ADD_ACC = 1'b0,  // reduce all active lanes to one sum
    ADD_EW  = 1'b1   // lane-by-lane a[i] + b[i]
  } add_mode_e;

  // Operand sources of the shared Mul block.
  typedef enum logic [1:0] {
    MA_BUF    = 2'd0,  // chunk read from the Input buffer
    MA_MULOUT = 2'd1,  // previous Mul result, held one cycle
    MA_SCALAR = 2'd2   // controller scalar broadcast to all lanes
  } mul_a_sel_e;

  typedef enum logic [1:0] {
    MB_SAME   = 2'd0,  // same as operand a (squaring)
    MB_SCALAR = 2'd1,  // controller scalar broadcast to all lanes
    MB_GAMMA  = 2'd2   // chunk read from the gamma buffer
  } mul_b_sel_e;

  // Operand sources of the shared Add block.
  typedef enum logic [1:0] {
    AA_BUF    = 2'd0,  // chunk read from the Input buffer
    AA_MULOUT = 2'd1,  // current Mul result
    AA_PSUM   = 2'd2   // Partial sum buffer contents in lanes 0..15
  } add_a_sel_e;

  typedef enum logic {
    AB_SCALAR = 1'b0,  // controller scalar broadcast (-mean)
    AB_BETA   = 1'b1   // chunk read from the beta buffer
  } add_b_sel_e;

  // Phases run by the main controller for every vector.
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_LOAD  = 3'd1,
    PH_MEAN  = 3'd2,
    PH_SHIFT = 3'd3,
    PH_M     = 3'd4,
    PH_ITER  = 3'd5,
    PH_OUT   = 3'd6,
    PH_DONE  = 3'd7
  } phase_e;

  // Active lanes of chunk c of a d-long vector (lanes elements per chunk).
  function automatic logic [6:0] chunk_lanes(logic [10:0] d, logic [4:0] c, int lanes);
    int rem = int'(d) - lanes * int'(c);
    if (rem >= lanes) return 7'(lanes);
    if (rem <= 0) return 7'd0;
    return 7'(rem);
  endfunction

  // Datapath requests of one phase controller for the current cycle.  The
  // top multiplexes the request of the active phase onto the shared blocks.
  // Scalars are carried at the maximum width used here (FP32); narrower
  // formats use the low bits.
  typedef struct packed {
    logic        buf_rd;      // read Input buffer row buf_row
    logic [3:0]  buf_row;
    logic        buf_wr;      // write Add element-wise result to row wr_row
    logic [3:0]  wr_row;
    logic        g_rd;        // read gamma buffer row g_row
    logic [3:0]  g_row;
    logic        b_rd;        // read beta buffer row b_row
    logic [3:0]  b_row;
    logic        mul_go;      // issue the Mul block this cycle
    mul_a_sel_e  mul_a;
    mul_b_sel_e  mul_b;
    logic [31:0] mul_sa;      // scalar for MA_SCALAR
    logic [31:0] mul_sb;      // scalar for MB_SCALAR
    logic        add_go;      // issue the Add block this cycle
    add_mode_e   add_mode;
    add_a_sel_e  add_a;
    add_b_sel_e  add_b;
    logic [31:0] add_sb;      // scalar for AB_SCALAR
    logic [6:0]  add_nlanes;  // active lanes in accumulate mode
    logic        psum_clr;    // clear the Partial sum buffer
    logic        psum_wr;     // store the Add sum at psum_idx
    logic [3:0]  psum_idx;
  } dp_req_t;

  localparam dp_req_t DP_REQ_IDLE = '0;

endpackage
