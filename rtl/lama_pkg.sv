// lama_pkg: types, constants and shared arithmetic of a Lama processing-using-memory
// bank (a LUT-based compute mechanism inside an HBM2 DRAM bank).
//
// Geometry follows HBM2 as the design assumes it: a 1 KB row is split over 16 mats, each mat
// row is 512 bits = 64 byte-wide columns, a subarray has 512 rows, a bank 64 subarrays. One
// internal column access (ICA) moves one byte per mat, i.e. one 16-byte "line".
//
// Timing constants are the HBM2 nanosecond values divided by the 2 ns period of the 500 MHz
// clock that the added bank logic runs at. tRP is not part of the published parameter set; it
// is taken here as tRC - tRAS = 16 ns, a choice of this implementation.
//
// Operation configuration (op_cfg_t):
//   prec : operand bits used to address a LUT / counter array (3..8)
//   wide : results are 16 bit (two ICAs per lookup, column = {b[4:0], ica}); otherwise 8 bit
//          (one ICA, column = b[5:0]).
// A LUT (or counter array) whose entries do not fit in one 64-byte mat row spans g = 2^glog2
// consecutive mats; the mat within the group is picked by the element's upper bits and the
// parallelism is p = 16 / g.
package lama_pkg;

  localparam int NUM_MATS  = 16;
  localparam int MAT_COLS  = 64;
  localparam int SA_ROWS   = 512;
  localparam int COL_W     = 6;    // log2(MAT_COLS)
  localparam int ROW_W     = 9;    // log2(SA_ROWS)
  localparam int SA_W      = 6;    // up to 64 subarrays
  localparam int TB_LINES  = 4;    // 64-byte temporary buffer = 4 lines of 16 bytes

  // Timing in 500 MHz cycles
  localparam int T_RCD = 8;        // 16 ns
  localparam int T_CL  = 8;        // 16 ns
  localparam int T_RP  = 8;        // 16 ns (tRC - tRAS)
  localparam int T_WR  = 8;        // 16 ns

  typedef logic [7:0]               byte_t;
  typedef byte_t [NUM_MATS-1:0]     line_t;     // one byte per mat
  typedef logic [COL_W-1:0]         col_t;
  typedef col_t  [NUM_MATS-1:0]     col_vec_t;

  typedef struct packed {
    logic [3:0] prec;
    logic       wide;
  } op_cfg_t;

  // Bank-level command set executed by lama_bank_ctrl
  typedef enum logic [3:0] {
    CMD_NOP   = 4'd0,
    CMD_ACT   = 4'd1,   // activate row in subarray
    CMD_PRE   = 4'd2,   // precharge subarray
    CMD_RD    = 4'd3,   // conventional read: 2 ICAs at col, col+1 -> host
    CMD_WR    = 4'd4,   // conventional write: 2 ICAs at col, col+1 <- host
    CMD_IRD   = 4'd5,   // internal read: 1 or 2 ICAs -> temporary buffer lines
    CMD_LUTR  = 4'd6,   // LUT retrieval of p elements (1 or 2 ICAs + mask)
    CMD_CNT   = 4'd7,   // occurrence counting step (fetch, load, count, write back)
    CMD_LDACT = 4'd8,   // load the 8-bit activation buffer
    CMD_TBRD  = 4'd9,   // send one temporary-buffer line to the host
    CMD_CFG   = 4'd10   // set operation configuration
  } cmd_op_e;

  // Source of the counter index in a counting step
  typedef enum logic [1:0] {
    SRC_SUM = 2'd0,     // exponent sum produced by the LUT (term 1)
    SRC_WGT = 2'd1,     // weight exponent int_W (term 2)
    SRC_ACT = 2'd2      // activation exponent int_A (term 3)
  } cnt_src_e;

  typedef struct packed {
    cmd_op_e   op;
    logic [SA_W-1:0]  sa;       // subarray (ACT/PRE/column commands)
    logic [ROW_W-1:0] row;      // row (ACT)
    col_t      col;             // column (RD/WR/IRD)
    logic      two;             // IRD: two ICAs instead of one
    logic [1:0] line;           // temporary-buffer line (IRD, LUTR dest, CNT scratch, TBRD)
    logic [5:0] base;           // first element index in the temporary buffer (LUTR)
    logic      to_tb;           // LUTR: results to temporary buffer line instead of host
    op_cfg_t   cfg;             // CFG
    byte_t     act;             // LDACT value {S_A, int_A}
    cnt_src_e  src;             // CNT index source
    logic [1:0] wline;          // CNT: line holding the weights (signs, int_W)
    logic [1:0] iline;          // CNT: line holding the sums
    logic [2:0] cglog2;         // CNT: log2 mats per output neuron
    logic [2:0] cmoff;          // CNT: mat offset of the counter array inside the neuron's mats
    col_t      coff;            // CNT: column offset of the counter array
    logic [3:0] cbase;          // CNT: first neuron (of 16 in the line) handled in this pass
  } bank_cmd_t;

  // One bulk-multiplication batch request (see lama_mult_seq)
  typedef struct packed {
    byte_t            a;
    logic [3:0]       prec;
    logic [SA_W-1:0]  src_sa;
    logic [ROW_W-1:0] src_row;
    logic [SA_W-1:0]  cmp_sa;
    logic [ROW_W-1:0] lut_row;
    logic [15:0]      n_elems;
  } mult_req_t;

  // Subarray / row placement of one layer in the accelerator mode (see lama_accel_seq)
  typedef struct packed {
    logic [SA_W-1:0]  src_sa;
    logic [ROW_W-1:0] w_row;
    logic [SA_W-1:0]  cmp_sa;
    logic [ROW_W-1:0] lut_row;
    logic [SA_W-1:0]  c1_sa;
    logic [SA_W-1:0]  c2_sa;
    logic [ROW_W-1:0] cnt_row;
  } accel_layout_t;

  // log2 of the number of mats one LUT spans
  function automatic logic [2:0] lut_glog2(op_cfg_t c);
    int ent;
    ent = c.wide ? 5 : 6;            // log2 entries per mat row
    if (int'(c.prec) > ent) return 3'(int'(c.prec) - ent);
    return 3'd0;
  endfunction

  // Column of element b for the given ICA
  function automatic col_t lut_col(op_cfg_t c, byte_t b, logic ica);
    if (c.wide) return {b[4:0], ica};
    return b[5:0];
  endfunction

  // Mat-within-group selected by element b
  function automatic logic [2:0] lut_msel(op_cfg_t c, byte_t b);
    logic [2:0] g;
    logic [2:0] m;
    g = lut_glog2(c);
    m = c.wide ? b[7:5] : {1'b0, b[7:6]};
    return m & 3'((1 << g) - 1);
  endfunction

endpackage
